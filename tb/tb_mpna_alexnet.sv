// tb_mpna_alexnet: AlexNet-sized layer passes on the full-size accelerator.
//
// Runs two workloads of real AlexNet layer size through the whole top module.
// Data and weights come from a behavioural DRAM through the transfer channels
// (random back-pressure, fixed latency).
//
//  * CONV4 slice. The 13x13x384 map is stored pre-padded to 15x15. The pass
//    computes one group of 16 of the 384 3x3 filters. A 16-filter pass over
//    all 48 channel groups needs 864 weight words, more than the 576 the
//    weight buffer holds. The input is therefore kept as two channel halves
//    (24 groups each), and the filters run as two passes:
//      - pass 1: half A, no accumulate, no finish;
//      - pass 2: half B, accumulate, finish (ReLU, no pooling).
//    The weights of pass 2 are loaded between the passes.
//  * FC8 slice. FC8 has 1000 neurons. With U = 125, each of the 8 SA-FC
//    columns holds 125 of them. The pass runs the first 96 of the 4096
//    inputs as three accumulating passes of 32 inputs. Each pass streams
//    cg*U+K+L-2 = 514 aligned weight words, which fits the weight buffer.
//
// Every output byte is compared with a reference computed here. The test also
// checks the pass timing:
//  * CONV: the streaming state of each pass lasts no more than chunks*169
//    cycles plus 2K (the first weight load), so every later weight load is
//    hidden behind streaming and chunks follow each other without a gap;
//  * FC: the streaming state of each pass lasts exactly 514 cycles.
// Layer sizes other than the 13x13x384 map are the usual AlexNet ones; the
// input values are random.
module tb_mpna_alexnet;
  import mpna_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

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
  localparam int DMEM = 65536;
  localparam int LAT  = 6;
  logic [63:0] dmem [DMEM];
  logic        pv [LAT];
  logic [63:0] pd [LAT];

  always @(posedge clk) begin
    dram_ready <= ($urandom % 5) != 0;
    if (dram_valid && dram_ready && dram_we) dmem[dram_addr[15:0]] <= dram_wdata;
    pv[0] <= dram_valid && dram_ready && !dram_we;
    pd[0] <= dmem[dram_addr[15:0]];
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
  end
  assign dram_rvalid = pv[LAT-1];
  assign dram_rdata  = pd[LAT-1];

  // ------------------------------------------------------------ workloads
  // CONV4 slice
  localparam int H = 15, W = 15, CG = 48, HCG = CG / 2, C = 8 * CG, P = 3, Q = 3, F = 16;
  localparam int M = H - P + 1, N = W - Q + 1;
  localparam int CHUNKS = P * Q * HCG;          // per pass
  localparam int CSHIFT = 8;
  // FC8 slice
  localparam int U = 125, FCG = 4, FPASS = 3, FIN = 8 * FCG * FPASS, FOUT = L * U, FSHIFT = 6;
  localparam int FT = FCG * U + K + L - 2;      // 514 words per pass

  // DRAM map (64-bit words)
  localparam int D_IA = 'h0000, D_IB = 'h1600;                 // 5400 words each
  localparam int D_CWA = 'h3000, D_CWB = 'h4000;               // 3456 words each
  localparam int D_FI = 'h5000, D_FW = 'h5100;                 // FC weights: 3 x 4112 words
  localparam int D_CO = 'h8800, D_FO = 'h8C00;
  localparam int FW_STRIDE = FT * 8;
  // on-chip data-buffer map
  localparam int B_IA = 0, B_IB = 6000, B_CO = 12000, B_FI = 13000, B_FO = 13100;

  int ifm [H][W][C];
  int cw  [F][P][Q][C];
  int fin [FIN];
  int fw  [FOUT][FIN];

  function automatic int sat8(input longint v);
    if (v > 127) return 127;
    if (v < -128) return -128;
    return int'(v);
  endfunction

  function automatic int rnd(input int lo, input int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  function automatic logic [7:0] b8(input int v);
    return v[7:0];
  endfunction

  // ------------------------------------------------------------ counters
  int n_conv_cyc = 0, n_fc_cyc = 0, n_layers = 0;
  always @(posedge clk) if (rst_n) begin
    if (u_dut.u_ctrl.st == 3'd1) n_conv_cyc++;   // CONV streaming state
    if (u_dut.u_ctrl.st == 3'd2) n_fc_cyc++;     // FC streaming state
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
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_desc_t dsc;
    int c0, got, ref_v;
    longint acc;
    // run-time loop bounds keep the data-generation loops rolled
    int nk, nl, nh;

    wdma_dram_addr = '0; wdma_buf_addr = '0; wdma_len = '0;
    ddma_dir = 1'b0; ddma_dram_addr = '0; ddma_buf_addr = '0; ddma_len = '0;
    layer_desc = '0;
    nk = K; nl = L; nh = 2;
    for (int i = 0; i < DMEM; i++) dmem[i] = '0;
    for (int i = 0; i < LAT; i++) begin pv[i] = 1'b0; pd[i] = '0; end

    // ---- data: a 13x13 map with a zero border of one position
    foreach (ifm[y, x, c])
      ifm[y][x][c] = (y == 0 || x == 0 || y == H - 1 || x == W - 1) ? 0 : rnd(-20, 20);
    foreach (cw[f, p, q, c]) cw[f][p][q][c] = rnd(-20, 20);
    foreach (fin[i]) fin[i] = rnd(-60, 60);
    foreach (fw[n, i]) fw[n][i] = rnd(-50, 50);

    // CONV input: two channel halves, each channels-last with HCG groups
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        for (int h = 0; h < nh; h++)
          for (int g = 0; g < HCG; g++)
            for (int k = 0; k < nk; k++)
              dmem[(h ? D_IB : D_IA) + (y * W + x) * HCG + g][8*k +: 8] =
                b8(ifm[y][x][8 * (h * HCG + g) + k]);
    // CONV weights of each half: chunk c=(p*Q+q)*HCG+g, words 2c and 2c+1
    for (int h = 0; h < nh; h++)
      for (int p = 0; p < P; p++)
        for (int q = 0; q < Q; q++)
          for (int g = 0; g < HCG; g++)
            for (int a = 0; a < 2; a++)
              for (int k = 0; k < nk; k++)
                for (int l = 0; l < nl; l++)
                  dmem[(h ? D_CWB : D_CWA) + (2 * ((p * Q + q) * HCG + g) + a) * 8 + k][8*l +: 8] =
                    b8(cw[8*a + l][p][q][8 * (h * HCG + g) + k]);
    // FC input and the aligned weight stream of each input slice
    for (int i = 0; i < FIN; i++) dmem[D_FI + i / 8][8*(i % 8) +: 8] = b8(fin[i]);
    for (int s = 0; s < FPASS; s++)
      for (int t = 0; t < FT; t++)
        for (int k = 0; k < nk; k++)
          for (int l = 0; l < nl; l++) begin
            int z;
            z = t - k - l;
            if (z >= 0 && z < FCG * U)
              dmem[D_FW + s * FW_STRIDE + t * 8 + k][8*l +: 8] =
                b8(fw[l * U + z % U][8 * (s * FCG + z / U) + k]);
          end

    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // ---- CONV4 slice
    fork
      dma_w(D_CWA, 0, CHUNKS * 2 * 8);
      dma_d(1'b0, D_IA, B_IA, H * W * HCG);
    join
    wait_dma();
    dma_d(1'b0, D_IB, B_IB, H * W * HCG);

    dsc = '0;
    dsc.kind = LAYER_CONV; dsc.in_base = B_IA; dsc.h = H; dsc.w = W; dsc.cg = HCG;
    dsc.p = P; dsc.q = Q; dsc.w_base = 0; dsc.out_base = B_CO; dsc.out_cg = 2;
    dsc.shift = CSHIFT; dsc.act = ACT_RELU;
    c0 = n_conv_cyc;
    run_layer(dsc);   // the second input half loads meanwhile
    checks++;
    if (n_conv_cyc - c0 > CHUNKS * M * N + 2 * K) begin
      failures++;
      $display("FAIL CONV pass 1 took %0d cycles, chunks*M*N = %0d", n_conv_cyc - c0, CHUNKS * M * N);
    end
    wait_dma();
    dma_w(D_CWB, 0, CHUNKS * 2 * 8);
    wait_dma();
    dsc.in_base = B_IB; dsc.accumulate = 1'b1; dsc.finish = 1'b1;
    c0 = n_conv_cyc;
    run_layer(dsc);
    checks++;
    if (n_conv_cyc - c0 > CHUNKS * M * N + 2 * K) begin
      failures++;
      $display("FAIL CONV pass 2 took %0d cycles, chunks*M*N = %0d", n_conv_cyc - c0, CHUNKS * M * N);
    end
    $display("CONV4 slice: %0d streaming cycles for %0d vectors", n_conv_cyc, 2 * CHUNKS * M * N);
    dma_d(1'b1, D_CO, B_CO, M * N * 2);
    wait_dma();

    // ---- FC8 slice: three accumulating input slices
    dma_d(1'b0, D_FI, B_FI, FIN / 8);
    wait_dma();
    for (int s = 0; s < FPASS; s++) begin
      dma_w(D_FW + s * FW_STRIDE, 0, FT * 8);
      wait_dma();
      dsc = '0;
      dsc.kind = LAYER_FC; dsc.in_base = B_FI + s * FCG; dsc.cg = FCG; dsc.u = U;
      dsc.w_base = 0; dsc.out_base = B_FO; dsc.act = ACT_NONE; dsc.shift = FSHIFT;
      dsc.accumulate = (s != 0); dsc.finish = (s == FPASS - 1);
      c0 = n_fc_cyc;
      run_layer(dsc);
      check($sformatf("FC pass %0d streaming cycles", s), n_fc_cyc - c0, FT);
    end
    dma_d(1'b1, D_FO, B_FO, U);
    wait_dma();

    repeat (4) @(posedge clk);

    // ---- CONV reference
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++)
        for (int f = 0; f < F; f++) begin
          acc = 0;
          for (int p = 0; p < P; p++)
            for (int q = 0; q < Q; q++)
              for (int c = 0; c < C; c++)
                acc += longint'(cw[f][p][q][c]) * ifm[m+p][n+q][c];
          ref_v = sat8(acc >>> CSHIFT);
          if (ref_v < 0) ref_v = 0;
          got = int'($signed(dmem[D_CO + (m * N + n) * 2 + f / 8][8*(f % 8) +: 8]));
          check($sformatf("conv4 out (%0d,%0d) f%0d", m, n, f), got, ref_v);
        end

    // ---- FC reference
    for (int n = 0; n < FOUT; n++) begin
      acc = 0;
      for (int i = 0; i < FIN; i++) acc += longint'(fw[n][i]) * fin[i];
      ref_v = sat8(acc >>> FSHIFT);
      got = int'($signed(dmem[D_FO + n % U][8*(n / U) +: 8]));
      check($sformatf("fc8 out n%0d", n), got, ref_v);
    end

    check("layer passes completed", n_layers, 2 + FPASS);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
