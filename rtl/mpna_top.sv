// mpna_top: the MPNA accelerator.
//
// Two 8x8 systolic arrays share one input-vector stream: SA-CONV (weights
// shifted in from the top, double-buffered in every PE) and SA-FC (the same
// array plus a dedicated weight connection to every PE, so all its weights can
// change every cycle). Their 16 bottom-row psum outputs feed 16 accumulation
// sub-units (scratch-pad + adder), which feed 16 pooling and activation
// sub-units. A 36 KB weight buffer and a 256 KB data buffer hold the working
// set; two transfer channels (weights: DRAM to weight buffer; data: both ways
// between DRAM and the data buffer) share the DRAM port through a round-robin
// arbiter. The control unit runs one layer pass per descriptor (see
// mpna_ctrl for the CONV and FC dataflows and the memory layouts).
//
// Interface: layer_start/layer_desc/layer_busy/layer_done for the control
// unit; wdma_* and ddma_* start a transfer (word addresses, length in 64-bit
// words; the weight channel only loads); dram_* is a request/response port to
// an external DRAM (valid/ready requests, in-order read answers).
// Weight-buffer byte addresses for the weight channel: word = addr/8, lane =
// addr%8 (64-bit lanes of a 64-byte word).
//
// The block set and their connections follow the published top-level diagram;
// the DMA channels and port protocols are this design's own.
module mpna_top
  import mpna_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // layer control
  input  logic        layer_start,
  input  layer_desc_t layer_desc,
  output logic        layer_busy,
  output logic        layer_done,
  // weight transfer channel (DRAM -> weight buffer)
  input  logic        wdma_start,
  input  logic [31:0] wdma_dram_addr,
  input  logic [15:0] wdma_buf_addr,
  input  logic [15:0] wdma_len,
  output logic        wdma_busy,
  output logic        wdma_done,
  // data transfer channel (DRAM <-> data buffer)
  input  logic        ddma_start,
  input  logic        ddma_dir,
  input  logic [31:0] ddma_dram_addr,
  input  logic [15:0] ddma_buf_addr,
  input  logic [15:0] ddma_len,
  output logic        ddma_busy,
  output logic        ddma_done,
  // DRAM port
  output logic        dram_valid,
  input  logic        dram_ready,
  output logic        dram_we,
  output logic [31:0] dram_addr,
  output logic [63:0] dram_wdata,
  input  logic        dram_rvalid,
  input  logic [63:0] dram_rdata
);

  // ---------------------------------------------------------------- control
  logic              db_re, db_we;
  logic [DB_AW-1:0]  db_addr;
  logic [63:0]       db_wdata, db_rdata;
  logic              wb_re_a, wb_re_b;
  logic [WB_AW-1:0]  wb_addr_a, wb_addr_b;
  act_t [K-1:0][L-1:0] wb_rd_a, wb_rd_b;
  logic              fc_mode, vec_tag, wload;
  act_t [K-1:0]      vec;
  meta_t             meta;
  act_t [L-1:0]      w_top_conv, w_top_fc;
  logic [SPM_AW-1:0] acc_rd_addr, pa_rd_addr;
  logic              pa_valid;
  pa_cmd_t           pa_cmd;
  logic [4:0]        pa_shift;
  act_t              pa_alpha;
  act_t [NCOL-1:0]   pa_out;

  mpna_ctrl u_ctrl (
    .clk, .rst_n,
    .start(layer_start), .desc(layer_desc), .busy(layer_busy), .done(layer_done),
    .db_re, .db_we, .db_addr, .db_wdata, .db_rdata,
    .wb_re_a, .wb_addr_a, .wb_rd_a, .wb_re_b, .wb_addr_b, .wb_rd_b,
    .fc_mode, .vec, .vec_tag, .meta, .wload, .w_top_conv, .w_top_fc,
    .acc_rd_addr, .pa_valid, .pa_cmd, .pa_shift, .pa_alpha, .pa_rd_addr, .pa_out
  );

  // ---------------------------------------------------------------- arrays
  psum_t [NCOL-1:0] psum;
  meta_t [NCOL-1:0] pmeta;
  act_t  [K-1:0][L-1:0] no_dir;
  assign no_dir = '0;

  mpna_sa #(.DIRECT_W(1'b0)) u_sa_conv (
    .clk, .rst_n, .fc_mode(1'b0), .vec, .vec_tag, .meta_in(fc_mode ? '0 : meta),
    .wload, .w_top(w_top_conv), .w_dir(no_dir),
    .psum(psum[L-1:0]), .meta_out(pmeta[L-1:0])
  );

  mpna_sa #(.DIRECT_W(1'b1)) u_sa_fc (
    .clk, .rst_n, .fc_mode, .vec, .vec_tag, .meta_in(meta),
    .wload, .w_top(w_top_fc), .w_dir(wb_rd_b),
    .psum(psum[NCOL-1:L]), .meta_out(pmeta[NCOL-1:L])
  );

  // ------------------------------------------------ accumulation, pooling
  for (genvar c = 0; c < NCOL; c++) begin : g_col
    acc_t accu;
    mpna_accum u_acc (
      .clk, .in_psum(psum[c]), .in_meta(pmeta[c]), .rd_addr(acc_rd_addr), .rd_data(accu)
    );
    mpna_pa_unit u_pa (
      .clk, .rst_n, .accu, .in_valid(pa_valid), .in_cmd(pa_cmd),
      .shift(pa_shift), .alpha(pa_alpha), .rd_addr(pa_rd_addr), .pa_out(pa_out[c])
    );
  end

  // ---------------------------------------------------------------- buffers
  logic        wd_we, wd_re;
  logic [15:0] wd_a;
  logic [63:0] wd_wdata;
  logic        dd_we, dd_re;
  logic [15:0] dd_a;
  logic [63:0] dd_wdata, dd_rdata;

  mpna_wbuf u_wbuf (
    .clk,
    .re_a(wb_re_a), .addr_a(wb_addr_a), .rd_a(wb_rd_a),
    .re_b(wb_re_b), .addr_b(wb_addr_b), .rd_b(wb_rd_b),
    .we(wd_we), .waddr(wd_a[WB_AW+2:3]), .wlane(wd_a[2:0]), .wdata(wd_wdata)
  );

  mpna_dbuf u_dbuf (
    .clk,
    .re_c(db_re), .we_c(db_we), .addr_c(db_addr), .wdata_c(db_wdata), .rdata_c(db_rdata),
    .re_x(dd_re), .we_x(dd_we), .addr_x(dd_a[DB_AW-1:0]), .wdata_x(dd_wdata), .rdata_x(dd_rdata)
  );

  // ------------------------------------------------------- DRAM side
  logic [1:0]        rq_valid, rq_ready, rq_we, rs_valid;
  logic [1:0][31:0]  rq_addr;
  logic [1:0][63:0]  rq_wdata;
  logic [63:0]       rs_data;

  mpna_dma u_wdma (
    .clk, .rst_n, .start(wdma_start), .dir(1'b0), .dram_addr(wdma_dram_addr),
    .buf_addr(wdma_buf_addr), .len(wdma_len), .busy(wdma_busy), .done(wdma_done),
    .req_valid(rq_valid[0]), .req_ready(rq_ready[0]), .req_we(rq_we[0]),
    .req_addr(rq_addr[0]), .req_wdata(rq_wdata[0]),
    .rsp_valid(rs_valid[0]), .rsp_data(rs_data),
    .buf_we(wd_we), .buf_re(wd_re), .buf_a(wd_a), .buf_wdata(wd_wdata), .buf_rdata(64'd0)
  );

  mpna_dma u_ddma (
    .clk, .rst_n, .start(ddma_start), .dir(ddma_dir), .dram_addr(ddma_dram_addr),
    .buf_addr(ddma_buf_addr), .len(ddma_len), .busy(ddma_busy), .done(ddma_done),
    .req_valid(rq_valid[1]), .req_ready(rq_ready[1]), .req_we(rq_we[1]),
    .req_addr(rq_addr[1]), .req_wdata(rq_wdata[1]),
    .rsp_valid(rs_valid[1]), .rsp_data(rs_data),
    .buf_we(dd_we), .buf_re(dd_re), .buf_a(dd_a), .buf_wdata(dd_wdata), .buf_rdata(dd_rdata)
  );

  mpna_arbiter #(.N(2)) u_arb (
    .clk, .rst_n,
    .req_valid(rq_valid), .req_ready(rq_ready), .req_we(rq_we),
    .req_addr(rq_addr), .req_wdata(rq_wdata), .rsp_valid(rs_valid), .rsp_data(rs_data),
    .dram_valid, .dram_ready, .dram_we, .dram_addr, .dram_wdata, .dram_rvalid, .dram_rdata
  );

endmodule
