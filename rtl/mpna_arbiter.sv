// mpna_arbiter: shares the single DRAM port among N transfer channels.
//
// Each channel offers a request (valid/ready handshake: a request moves when
// valid and ready are both high in a cycle). The arbiter grants one channel per
// cycle in round-robin order, starting after the channel granted last, and
// forwards its request to the DRAM port. The DRAM is expected to answer reads
// in order, one rsp_valid pulse per read; the arbiter remembers which channel
// issued each outstanding read in a small FIFO and steers the answer back to
// it. A read is not granted while the FIFO is full. Writes get no answer.
//
// The published design only names an arbiter between the DRAM and the two
// buffers; the round-robin policy, the handshake and the in-order response
// routing are this design's own.
module mpna_arbiter #(
  parameter int unsigned N       = 2,
  parameter int unsigned AW      = 32,
  parameter int unsigned DW      = 64,
  parameter int unsigned OUTSTND = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // channels
  input  logic [N-1:0]         req_valid,
  output logic [N-1:0]         req_ready,
  input  logic [N-1:0]         req_we,
  input  logic [N-1:0][AW-1:0] req_addr,
  input  logic [N-1:0][DW-1:0] req_wdata,
  output logic [N-1:0]         rsp_valid,
  output logic [DW-1:0]        rsp_data,
  // DRAM port
  output logic                 dram_valid,
  input  logic                 dram_ready,
  output logic                 dram_we,
  output logic [AW-1:0]        dram_addr,
  output logic [DW-1:0]        dram_wdata,
  input  logic                 dram_rvalid,
  input  logic [DW-1:0]        dram_rdata
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned FW = $clog2(OUTSTND);

  logic [IW-1:0] last_q;     // channel granted last
  logic [IW-1:0] gnt;
  logic          gnt_v;

  logic [IW-1:0] fifo [OUTSTND];
  logic [FW-1:0] wr_ptr, rd_ptr;
  logic [FW:0]   count;
  logic          full;

  assign full = (count == (FW+1)'(OUTSTND));

  // round-robin pick among channels that may go now
  always_comb begin
    gnt   = '0;
    gnt_v = 1'b0;
    for (int i = 1; i <= N; i++) begin
      int unsigned c;
      c = (int'(last_q) + i) % N;
      if (!gnt_v && req_valid[c] && (req_we[c] || !full)) begin
        gnt   = IW'(c);
        gnt_v = 1'b1;
      end
    end
  end

  always_comb begin
    dram_valid = gnt_v;
    dram_we    = req_we[gnt];
    dram_addr  = req_addr[gnt];
    dram_wdata = req_wdata[gnt];
    req_ready  = '0;
    if (gnt_v) req_ready[gnt] = dram_ready;
    rsp_valid  = '0;
    if (dram_rvalid) rsp_valid[fifo[rd_ptr]] = 1'b1;
    rsp_data   = dram_rdata;
  end

  logic push, pop;
  assign push = gnt_v && dram_ready && !req_we[gnt];
  assign pop  = dram_rvalid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      last_q <= IW'(N - 1);
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (gnt_v && dram_ready) last_q <= gnt;
      if (push) begin
        fifo[wr_ptr] <= gnt;
        wr_ptr <= wr_ptr + FW'(1);
      end
      if (pop) rd_ptr <= rd_ptr + FW'(1);
      count <= count + (FW+1)'(push) - (FW+1)'(pop);
    end
  end

  // an answer must belong to an outstanding read
  a_no_orphan_rsp: assert property (@(posedge clk) disable iff (!rst_n) dram_rvalid |-> count != 0);

endmodule
