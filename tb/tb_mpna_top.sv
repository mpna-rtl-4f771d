// tb_mpna_top: end-to-end test of the MPNA accelerator at its full size.
//
// A behavioural DRAM (in-order answers, a few cycles of latency, random
// back-pressure) holds a CONV layer (8x8x16 input, sixteen 3x3x16 filters,
// 2x2 max pooling, Leaky-ReLU) and an FC layer (32 inputs, 40 neurons, ReLU).
// The test loads weights and data through both transfer channels at the same
// time, runs the CONV pass and the FC pass, stores the results back to DRAM
// and compares them with a reference computed here from the same numbers.
// It also counts the mechanisms of the design and fails if one never occurs:
// weight loading overlapped with streaming, weight swaps, FC mode with per-cycle
// weights, pooling with the stored partial result, Leaky-ReLU on a negative
// value, saturation in requantisation, arbiter contention and DRAM
// back-pressure. The FC pass must take exactly cg*U+K+L-2 streaming cycles
// (one result per column per cycle, the SA-FC dataflow), and the CONV pass at
// most chunks*M*N+2K cycles (weight loads hidden behind streaming).
module tb_mpna_top;
  import mpna_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  // ------------------------------------------------------------------ DUT
  logic        layer_start = 1'b0, layer_busy, layer_done;
  layer_desc_t layer_desc;
  logic        wdma_start = 1'b0, wdma_busy, wdma_done;
  logic [31:0] wdma_dram_addr;
  logic [15:0] wdma_buf_addr, wdma_len;
  logic        ddma_start = 1'b0, ddma_dir, ddma_busy, ddma_done;
  logic [31:0] ddma_dram_addr;
  logic [15:0] ddma_buf_addr, ddma_len;
  logic        dram_valid, dram_ready, dram_we, dram_rvalid;
  logic [31:0] dram_addr;
  logic [63:0] dram_wdata, dram_rdata;

  mpna_top u_dut (.*);

  // ------------------------------------------------------- behavioural DRAM
  localparam int DMEM = 16384;
  localparam int LAT  = 4;
  logic [63:0] dmem [DMEM];
  logic        pv [LAT];
  logic [63:0] pd [LAT];

  always @(posedge clk) begin
    dram_ready <= ($urandom % 4) != 0;
    if (dram_valid && dram_ready && dram_we) dmem[dram_addr[13:0]] <= dram_wdata;
    pv[0] <= dram_valid && dram_ready && !dram_we;
    pd[0] <= dmem[dram_addr[13:0]];
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
  end
  assign dram_rvalid = pv[LAT-1];
  assign dram_rdata  = pd[LAT-1];

  // ------------------------------------------------------------ workloads
  // CONV: H=W=8, 16 channels (cg=2), 3x3 kernels, 16 filters, pool, leaky
  localparam int H = 8, W = 8, CG = 2, C = 8 * CG, P = 3, Q = 3, F = 16;
  localparam int M = H - P + 1, N = W - Q + 1, MO = M / 2, NO = N / 2;
  localparam int CSHIFT = 6;
  localparam int ALPHA = 26;   // ~0.2 in Q1.7
  // FC: 32 inputs (4 words), U=5 -> 40 neurons, relu
  localparam int FCG = 4, FIN = 8 * FCG, U = 5, FOUT = L * U, FSHIFT = 5;
  localparam int FT = FCG * U + K + L - 2;

  // DRAM map (64-bit words)
  localparam int D_IF = 'h0000, D_CW = 'h0400, D_FI = 'h0800, D_FW = 'h0900;
  localparam int D_CO = 'h1000, D_FO = 'h1100;
  // on-chip maps
  localparam int B_IF = 0, B_CO = 1000, B_FI = 2000, B_FO = 2100;
  localparam int W_CW = 0, W_FW = 100;   // weight-buffer words

  int ifm [H][W][C];
  int cw  [F][P][Q][C];
  int fin [FIN];
  int fw  [FOUT][FIN];

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int act_ref(input int x, input act_e a);
    if (x >= 0 || a == ACT_NONE) return x;
    if (a == ACT_RELU) return 0;
    return sat8(-(((-x) * ALPHA) >>> 7));
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic logic [7:0] b8(input int v);
    return v[7:0];
  endfunction

  // ------------------------------------------------------------ counters
  int n_overlap = 0, n_swap = 0, n_fc_cycles = 0, n_pool3 = 0, n_leaky = 0;
  int n_sat = 0, n_contend = 0, n_backpressure = 0, n_layers = 0, n_conv_cycles = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_ctrl.load_go && u_dut.u_ctrl.st_run) n_overlap++;
    if (u_dut.u_ctrl.vec_tag) n_swap++;
    if (u_dut.u_ctrl.st == 3'd2) n_fc_cycles++;  // S_FC
    if (u_dut.u_ctrl.st == 3'd1) n_conv_cycles++;  // S_CONV
    if (u_dut.u_ctrl.pa_valid && u_dut.u_ctrl.pa_cmd.use_spm) n_pool3++;
    if (u_dut.u_arb.req_valid == 2'b11) n_contend++;
    if (dram_valid && !dram_ready) n_backpressure++;
    if (layer_done) n_layers++;
  end

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic dma_w(input int dram, input int bufw, input int len);
    wdma_dram_addr = dram; wdma_buf_addr = 16'(bufw); wdma_len = 16'(len);
    wdma_start = 1'b1; @(posedge clk); wdma_start = 1'b0;
  endtask
  task automatic dma_d(input logic dir, input int dram, input int bufw, input int len);
    ddma_dir = dir; ddma_dram_addr = dram; ddma_buf_addr = 16'(bufw); ddma_len = 16'(len);
    ddma_start = 1'b1; @(posedge clk); ddma_start = 1'b0;
  endtask
  task automatic wait_dma();
    @(posedge clk);
    while (wdma_busy || ddma_busy) @(posedge clk);
  endtask
  task automatic run_layer(input layer_desc_t dsc);
    layer_desc = dsc; layer_start = 1'b1; @(posedge clk); layer_start = 1'b0;
    @(posedge clk);
    while (layer_busy) @(posedge clk);
  endtask

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_desc_t dsc;
    int fc_start, fc_cycles;
    longint acc;
    int ref_v, got;

    wdma_dram_addr = '0; wdma_buf_addr = '0; wdma_len = '0;
    ddma_dir = 1'b0; ddma_dram_addr = '0; ddma_buf_addr = '0; ddma_len = '0;
    layer_desc = '0;
    for (int i = 0; i < DMEM; i++) dmem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end

    // ---- data
    foreach (ifm[y, x, c]) ifm[y][x][c] = rnd(-40, 40);
    foreach (cw[f, p, q, c]) cw[f][p][q][c] = rnd(-40, 40);
    foreach (fin[i]) fin[i] = rnd(-60, 60);
    foreach (fw[n, i]) fw[n][i] = rnd(-50, 50);

    // CONV input, channels-last words
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int g = 0; g < CG; g++)
          for (int k = 0; k < 8; k++)
            dmem[D_IF + (y * W + x) * CG + g][8*k +: 8] = b8(ifm[y][x][8*g + k]);
    // CONV weights: chunk c=(p*Q+q)*CG+g, word 2c (filters 0-7) and 2c+1 (8-15),
    // lane k, byte l = filter l, channel 8g+k
    for (int p = 0; p < P; p++)
      for (int q = 0; q < Q; q++)
        for (int g = 0; g < CG; g++)
          for (int a = 0; a < 2; a++)
            for (int k = 0; k < K; k++)
              for (int l = 0; l < L; l++)
                dmem[D_CW + (2 * ((p * Q + q) * CG + g) + a) * 8 + k][8*l +: 8] =
                  b8(cw[8*a + l][p][q][8*g + k]);
    // FC input
    for (int i = 0; i < FIN; i++) dmem[D_FI + i / 8][8*(i % 8) +: 8] = b8(fin[i]);
    // FC weights in the aligned order
    for (int t = 0; t < FT; t++)
      for (int k = 0; k < K; k++)
        for (int l = 0; l < L; l++) begin
          int s;
          s = t - k - l;
          if (s >= 0 && s < FCG * U)
            dmem[D_FW + t * 8 + k][8*l +: 8] = b8(fw[l * U + s % U][8 * (s / U) + k]);
        end

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- loads: both channels at once
    fork
      dma_w(D_CW, W_CW * 8, P * Q * CG * 2 * 8);
      dma_d(1'b0, D_IF, B_IF, H * W * CG);
    join
    wait_dma();
    fork
      dma_w(D_FW, W_FW * 8, FT * 8);
      dma_d(1'b0, D_FI, B_FI, FCG);
    join
    wait_dma();

    // ---- CONV pass
    dsc = '0;
    dsc.kind = LAYER_CONV; dsc.in_base = B_IF; dsc.h = H; dsc.w = W; dsc.cg = CG;
    dsc.p = P; dsc.q = Q; dsc.w_base = W_CW; dsc.out_base = B_CO; dsc.out_cg = 2;
    dsc.out_g = 0; dsc.finish = 1'b1; dsc.pool = 1'b1; dsc.act = ACT_LEAKY;
    dsc.alpha = ALPHA; dsc.shift = CSHIFT;
    run_layer(dsc);
    // M*N = 36 >= 2K+L+2: every weight load after the first is hidden
    checks++;
    if (n_conv_cycles > P * Q * CG * M * N + 2 * K) begin
      failures++;
      $display("FAIL CONV pass took %0d cycles for %0d vectors", n_conv_cycles, P * Q * CG * M * N);
    end

    // ---- FC pass
    dsc = '0;
    dsc.kind = LAYER_FC; dsc.in_base = B_FI; dsc.cg = FCG; dsc.u = U;
    dsc.w_base = W_FW; dsc.out_base = B_FO; dsc.finish = 1'b1; dsc.act = ACT_RELU;
    dsc.shift = FSHIFT;
    fc_start = n_fc_cycles;
    run_layer(dsc);
    fc_cycles = n_fc_cycles - fc_start;
    check("FC streaming cycles", fc_cycles, FT);

    // ---- stores
    dma_d(1'b1, D_CO, B_CO, MO * NO * 2);
    wait_dma();
    dma_d(1'b1, D_FO, B_FO, U);
    wait_dma();
    repeat (4) @(posedge clk);

    // ---- CONV reference
    for (int mo = 0; mo < MO; mo++)
      for (int no = 0; no < NO; no++)
        for (int f = 0; f < F; f++) begin
          int mx;
          mx = -1000;
          for (int dm = 0; dm < 2; dm++)
            for (int dn = 0; dn < 2; dn++) begin
              int v;
              acc = 0;
              for (int p = 0; p < P; p++)
                for (int q = 0; q < Q; q++)
                  for (int c = 0; c < C; c++)
                    acc += longint'(cw[f][p][q][c]) * ifm[2*mo+dm+p][2*no+dn+q][c];
              v = sat8(acc >>> CSHIFT);
              if (v != int'(acc >>> CSHIFT)) n_sat++;
              if (v > mx) mx = v;
            end
          if (mx < 0) n_leaky++;
          ref_v = act_ref(mx, ACT_LEAKY);
          got = int'($signed(dmem[D_CO + (mo * NO + no) * 2 + f / 8][8*(f % 8) +: 8]));
          check($sformatf("conv out (%0d,%0d) f%0d", mo, no, f), got, ref_v);
        end

    // ---- FC reference
    for (int n = 0; n < FOUT; n++) begin
      acc = 0;
      for (int i = 0; i < FIN; i++) acc += longint'(fw[n][i]) * fin[i];
      ref_v = act_ref(sat8(acc >>> FSHIFT), ACT_RELU);
      got = int'($signed(dmem[D_FO + n % U][8*(n / U) +: 8]));
      check($sformatf("fc out n%0d", n), got, ref_v);
    end

    // ---- mechanisms
    $display("events: overlap=%0d swap=%0d fc_cycles=%0d pool3=%0d leaky=%0d sat=%0d contend=%0d backpressure=%0d layers=%0d",
             n_overlap, n_swap, n_fc_cycles, n_pool3, n_leaky, n_sat, n_contend, n_backpressure, n_layers);
    check("overlapped weight loads seen", int'(n_overlap > 0), 1);
    check("weight swaps = chunks", n_swap, P * Q * CG);
    check("pooling with stored value seen", int'(n_pool3 > 0), 1);
    check("leaky on negative seen", int'(n_leaky > 0), 1);
    check("saturation seen", int'(n_sat > 0), 1);
    check("arbiter contention seen", int'(n_contend > 0), 1);
    check("DRAM back-pressure seen", int'(n_backpressure > 0), 1);
    check("layer passes completed", n_layers, 2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
