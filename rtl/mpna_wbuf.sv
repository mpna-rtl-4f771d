// mpna_wbuf: on-chip weight buffer of MPNA (36 KB).
//
// Organised as DEPTH words of K*L bytes, one byte per PE of an array, so a
// single read delivers a whole weight set: SA-FC takes a word per cycle
// through its dedicated per-PE connections, SA-CONV takes one row of a word
// per cycle while shifting a new set into its columns. Two read ports (port a
// for SA-CONV, port b for SA-FC) and one 64-bit write port from the DRAM side;
// a write address selects a word and one of its K*L/8 64-bit lanes.
// Reads are synchronous: data appear the cycle after the address.
//
// The capacity is the published one; the word shape, port count and timing are
// this design's own. The array stands in for the memory macro of a chip.
module mpna_wbuf
  import mpna_pkg::*;
#(
  parameter int unsigned DEPTH = WB_DEPTH
) (
  input  logic                          clk,
  input  logic                          re_a,
  input  logic [$clog2(DEPTH)-1:0]      addr_a,
  output act_t [K-1:0][L-1:0]           rd_a,
  input  logic                          re_b,
  input  logic [$clog2(DEPTH)-1:0]      addr_b,
  output act_t [K-1:0][L-1:0]           rd_b,
  input  logic                          we,
  input  logic [$clog2(DEPTH)-1:0]      waddr,
  input  logic [$clog2(K*L/8)-1:0]      wlane,
  input  logic [63:0]                   wdata
);

  localparam int unsigned LANES = K * L / 8;
  typedef logic [LANES-1:0][63:0] word_t;

  word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
    if (re_a) rd_a <= mem[addr_a];
    if (re_b) rd_b <= mem[addr_b];
  end

endmodule
