// tb_mpna_sa_fc: SA-FC (mpna_sa with DIRECT_W=1) at 8x8 in FC mode.
// An FC layer of 3*8 inputs and L*U = 48 neurons (U = 6) is streamed the way
// the SA-FC dataflow prescribes: each 8-input word is held for U cycles, and
// every cycle a new weight goes to every PE through the dedicated connections,
// in the aligned order (PE (k,l) gets, in stream cycle t, the weight of input
// k for neuron l*U + (t-k-l) mod U). Column l must deliver neuron l*U+j with
// one result per cycle and a latency of K+1+l cycles (the published timing
// shows K+l for the l-th column counted from 1; this design's input register
// adds one cycle). Afterwards the same array runs one CONV chunk through its
// weight chains with fc_mode low, to check the time-multiplexed use.
module tb_mpna_sa_fc;
  import mpna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;

  logic          fc_mode;
  act_t  [K-1:0] vec;
  logic          vec_tag, wload;
  meta_t         meta_in;
  act_t  [L-1:0] w_top;
  act_t  [K-1:0][L-1:0] w_dir;
  psum_t [L-1:0] psum;
  meta_t [L-1:0] meta_out;

  mpna_sa #(.DIRECT_W(1'b1)) dut (.*);

  localparam int U = 6, NW = 3, S = NW * U, T = S + K + L - 2;
  int a  [NW][K];
  int w  [L*U][NW*K];
  int cw [K][L];
  int cx [20][K];
  int entry [256];
  int seen, phase;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    #1;
    for (int l = 0; l < L; l++)
      if (meta_out[l].valid) begin
        int i, e;
        i = int'(meta_out[l].addr);
        e = 0;
        if (phase == 0) begin
          // stream index i: word i/U, neuron slot i%U
          for (int k = 0; k < K; k++) e += w[l * U + i % U][(i / U) * K + k] * a[i / U][k];
        end else begin
          for (int k = 0; k < K; k++) e += cw[k][l] * cx[i][k];
        end
        checks++;
        if (int'(psum[l]) != e || cyc - entry[i] != K + 1 + l) begin
          failures++;
          if (failures < 10) $display("FAIL ph%0d i=%0d col %0d: %0d exp %0d lat %0d", phase, i, l, psum[l], e, cyc - entry[i]);
        end
        seen++;
      end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fc_mode = 1; vec = '0; vec_tag = 0; wload = 0; meta_in = '0; w_top = '0; w_dir = '0;
    seen = 0; phase = 0;
    foreach (a[c, k]) a[c][k] = $signed($urandom % 256) - 128;
    foreach (w[n, i]) w[n][i] = $signed($urandom % 256) - 128;
    foreach (cw[k, l]) cw[k][l] = $signed($urandom % 256) - 128;
    foreach (cx[i, k]) cx[i][k] = $signed($urandom % 256) - 128;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      for (int k = 0; k < K; k++)
        for (int l = 0; l < L; l++) begin
          int s;
          s = t - k - l;
          w_dir[k][l] = (s >= 0 && s < S) ? act_t'(w[l * U + s % U][(s / U) * K + k]) : act_t'(0);
        end
      if (t < S) begin
        for (int k = 0; k < K; k++) vec[k] = act_t'(a[t / U][k]);
        meta_in = '{valid: 1'b1, first: 1'b0, addr: SPM_AW'(t)};
        entry[t] = cyc;
      end else meta_in = '0;
    end
    @(negedge clk); meta_in = '0;
    repeat (K + L + 4) @(posedge clk);
    checks++;
    if (seen != S * L) begin failures++; $display("FAIL FC outputs %0d", seen); end

    // CONV use of the same array
    @(negedge clk);
    phase = 1; seen = 0; fc_mode = 0;
    for (int r = K - 1; r >= 0; r--) begin
      wload = 1;
      for (int l = 0; l < L; l++) w_top[l] = act_t'(cw[r][l]);
      @(negedge clk);
    end
    wload = 0;
    for (int i = 0; i < 20; i++) begin
      for (int k = 0; k < K; k++) vec[k] = act_t'(cx[i][k]);
      vec_tag = (i == 0);
      meta_in = '{valid: 1'b1, first: 1'b0, addr: SPM_AW'(i)};
      entry[i] = cyc;
      @(negedge clk);
    end
    meta_in = '0; vec_tag = 0;
    repeat (K + L + 4) @(posedge clk);
    checks++;
    if (seen != 20 * L) begin failures++; $display("FAIL CONV outputs %0d", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
