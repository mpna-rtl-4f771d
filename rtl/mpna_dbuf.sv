// mpna_dbuf: on-chip data buffer of MPNA (256 KB).
//
// Holds input and output activations in 64-bit words of K=8 activations
// (channels-last: the 8 channels of one feature-map position, or 8 FC inputs).
// Port c serves the compute side (the control unit reads input vectors and
// writes results back); port x serves the DRAM side. Both ports read and write;
// reads are synchronous (data the cycle after the address). If both ports
// write the same word in one cycle, port x wins.
//
// The capacity is the published one; word width, ports and timing are this
// design's own. The array stands in for the memory macro of a chip.
module mpna_dbuf
  import mpna_pkg::*;
#(
  parameter int unsigned DEPTH = DB_DEPTH
) (
  input  logic                     clk,
  input  logic                     re_c,
  input  logic                     we_c,
  input  logic [$clog2(DEPTH)-1:0] addr_c,
  input  logic [63:0]              wdata_c,
  output logic [63:0]              rdata_c,
  input  logic                     re_x,
  input  logic                     we_x,
  input  logic [$clog2(DEPTH)-1:0] addr_x,
  input  logic [63:0]              wdata_x,
  output logic [63:0]              rdata_x
);

  logic [63:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_c) mem[addr_c] <= wdata_c;
    if (we_x) mem[addr_x] <= wdata_x;
    if (re_c) rdata_c <= mem[addr_c];
    if (re_x) rdata_x <= mem[addr_x];
  end

endmodule
