// tb_mpna_ctrl: the control unit alone, with its memories and datapath
// replaced by constant data. The test records what the unit issues and
// compares it with sequences worked out here from the descriptor:
//  CONV (6x6 input, 2 channel groups, 2x2 kernel, pooling): every input read
//  address in chunk order, K weight-row shifts and one swap tag per chunk,
//  metadata (address m*N+n, first only in the first chunk), that at least one
//  weight load overlaps streaming, the pooling commands and the write-back
//  addresses;
//  FC (3 input words, U = 4): consecutive weight reads w_base..w_base+T-1 with
//  T = cg*U+K+L-2, one input read per word, fc_mode during the pass, U
//  write-backs; done pulses once per pass.
module tb_mpna_ctrl;
  import mpna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done;
  layer_desc_t desc;
  logic db_re, db_we, wb_re_a, wb_re_b, fc_mode, vec_tag, wload, pa_valid;
  logic [DB_AW-1:0] db_addr;
  logic [63:0] db_wdata, db_rdata;
  logic [WB_AW-1:0] wb_addr_a, wb_addr_b;
  act_t [K-1:0][L-1:0] wb_rd_a, wb_rd_b;
  act_t [K-1:0] vec;
  meta_t meta;
  act_t [L-1:0] w_top_conv, w_top_fc;
  logic [SPM_AW-1:0] acc_rd_addr, pa_rd_addr;
  pa_cmd_t pa_cmd;
  logic [4:0] pa_shift;
  act_t pa_alpha;
  act_t [NCOL-1:0] pa_out;

  mpna_ctrl dut (.*);

  assign db_rdata = 64'h0102_0304_0506_0708;
  assign wb_rd_a  = '0;
  assign wb_rd_b  = '0;
  always_comb for (int c = 0; c < NCOL; c++) pa_out[c] = act_t'(c + 1);

  // recorders
  int rd_addrs [$], wr_addrs [$], wb_b_addrs [$];
  int n_wload, n_tag, n_meta, n_first, n_pa, n_fire, n_spm, n_done, n_fc, n_overlap;
  always @(posedge clk) if (rst_n) begin
    if (db_re) rd_addrs.push_back(int'(db_addr));
    if (db_we) begin
      wr_addrs.push_back(int'(db_addr));
      // byte 0 carries sub-unit 0 (value 1) or sub-unit L (value L+1)
      checks++;
      if (db_wdata[7:0] != ((desc.kind == LAYER_FC || dut.whalf) ? 8'(L + 1) : 8'd1)) begin
        failures++;
        $display("FAIL writeback data %h", db_wdata);
      end
    end
    if (wb_re_b && fc_mode) wb_b_addrs.push_back(int'(wb_addr_b));
    if (wload) n_wload++;
    if (vec_tag) n_tag++;
    if (meta.valid) n_meta++;
    if (meta.valid && meta.first) n_first++;
    if (pa_valid) n_pa++;
    if (pa_valid && pa_cmd.fire) n_fire++;
    if (pa_valid && pa_cmd.use_spm) n_spm++;
    if (done) n_done++;
    if (fc_mode) n_fc++;
    if (dut.load_go && dut.st_run) n_overlap++;
  end

  task automatic clear();
    rd_addrs.delete(); wr_addrs.delete(); wb_b_addrs.delete();
    n_wload = 0; n_tag = 0; n_meta = 0; n_first = 0; n_pa = 0; n_fire = 0; n_spm = 0;
    n_done = 0; n_fc = 0; n_overlap = 0;
  endtask
  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: %0d exp %0d", what, got, exp);
    end
  endtask
  task automatic run();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int H = 6, W = 6, CG = 2, P = 2, Q = 2, M = 5, N = 5, IB = 40, OB = 300, OCG = 4, OG = 2;
    int WB = 10, U = 4, FCG = 3, T;
    int idx;
    desc = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---------------- CONV
    clear();
    desc.kind = LAYER_CONV; desc.in_base = DB_AW'(IB); desc.h = 8'(H); desc.w = 8'(W);
    desc.cg = 8'(CG); desc.p = 4'(P); desc.q = 4'(Q); desc.w_base = WB_AW'(WB);
    desc.out_base = DB_AW'(OB); desc.out_cg = 8'(OCG); desc.out_g = 8'(OG);
    desc.finish = 1; desc.pool = 1; desc.act = ACT_RELU;
    run();
    chk("conv reads", rd_addrs.size(), P * Q * CG * M * N);
    idx = 0;
    for (int p = 0; p < P; p++)
      for (int q = 0; q < Q; q++)
        for (int g = 0; g < CG; g++)
          for (int m = 0; m < M; m++)
            for (int n = 0; n < N; n++) begin
              if (idx < rd_addrs.size())
                chk($sformatf("conv read %0d", idx), rd_addrs[idx], IB + ((m + p) * W + n + q) * CG + g);
              idx++;
            end
    chk("weight row shifts", n_wload, K * P * Q * CG);
    chk("swap tags", n_tag, P * Q * CG);
    chk("metadata", n_meta, P * Q * CG * M * N);
    chk("first flags", n_first, M * N);
    chk("overlapped loads", int'(n_overlap > 0), 1);
    chk("pool samples", n_pa, 4 * 4);
    chk("pool fires", n_fire, 8);
    chk("pool stored-value uses", n_spm, 8);
    chk("writebacks", wr_addrs.size(), 2 * 2 * 2);
    for (int o = 0; o < 4; o++)
      for (int h = 0; h < 2; h++)
        if (2 * o + h < wr_addrs.size())
          chk("writeback address", wr_addrs[2 * o + h], OB + o * OCG + OG + h);
    chk("conv done", n_done, 1);
    chk("no fc mode in conv", n_fc, 0);

    // ---------------- FC
    clear();
    desc = '0;
    desc.kind = LAYER_FC; desc.in_base = DB_AW'(IB); desc.cg = 8'(FCG); desc.u = 9'(U);
    desc.w_base = WB_AW'(WB); desc.out_base = DB_AW'(OB); desc.finish = 1; desc.act = ACT_RELU;
    T = FCG * U + K + L - 2;
    run();
    chk("fc weight reads", wb_b_addrs.size(), T);
    for (int t = 0; t < T && t < wb_b_addrs.size(); t++) chk("fc weight address", wb_b_addrs[t], WB + t);
    chk("fc input reads", rd_addrs.size(), FCG);
    for (int c = 0; c < FCG && c < rd_addrs.size(); c++) chk("fc input address", rd_addrs[c], IB + c);
    chk("fc metadata", n_meta, FCG * U);
    chk("fc first flags", n_first, U);
    chk("fc writebacks", wr_addrs.size(), U);
    for (int j = 0; j < U && j < wr_addrs.size(); j++) chk("fc writeback address", wr_addrs[j], OB + j);
    chk("fc done", n_done, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
