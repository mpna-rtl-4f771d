// tb_mpna_sa_conv: SA-CONV (mpna_sa with DIRECT_W=0) at 8x8.
// Loads weight set A through the column chains, streams vectors with A, loads
// set B while that stream is still running, then streams vectors that switch
// to B with the swap tag. Every column output must equal the dot product of
// its weight column with the vector, and must leave column l exactly K+1+l
// cycles after the vector entered. A second test streams without a gap across
// the swap, so the two weight sets are in the array at the same time.
module tb_mpna_sa_conv;
  import mpna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;

  act_t  [K-1:0] vec;
  logic          vec_tag, wload;
  meta_t         meta_in;
  act_t  [L-1:0] w_top;
  act_t  [K-1:0][L-1:0] w_dir;
  psum_t [L-1:0] psum;
  meta_t [L-1:0] meta_out;

  mpna_sa #(.DIRECT_W(1'b0)) dut (.clk, .rst_n, .fc_mode(1'b0), .vec, .vec_tag, .meta_in,
    .wload, .w_top, .w_dir, .psum, .meta_out);

  localparam int NV = 40;
  int wt [2][K][L];
  int x  [2*NV][K];
  int entry [2*NV];
  int wset [2*NV];
  int seen;

  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  always @(posedge clk) begin
    #1;
    for (int l = 0; l < L; l++)
      if (meta_out[l].valid) begin
        int i, e;
        i = int'(meta_out[l].addr);
        e = 0;
        for (int k = 0; k < K; k++) e += wt[wset[i]][k][l] * x[i][k];
        checks++;
        if (int'(psum[l]) != e || cyc - entry[i] != K + 1 + l) begin
          failures++;
          if (failures < 10) $display("FAIL vec %0d col %0d: %0d exp %0d, latency %0d", i, l, psum[l], e, cyc - entry[i]);
        end
        seen++;
      end
  end

  task automatic load_row(input int s, input int r);
    wload = 1'b1;
    for (int l = 0; l < L; l++) w_top[l] = act_t'(wt[s][r][l]);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec = '0; vec_tag = 0; wload = 0; meta_in = '0; w_top = '0; w_dir = '0; seen = 0;
    foreach (wt[s, k, l]) wt[s][k][l] = $signed($urandom % 256) - 128;
    foreach (x[i, k]) x[i][k] = $signed($urandom % 256) - 128;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // load set A, bottom row first
    for (int r = K - 1; r >= 0; r--) begin
      @(negedge clk); load_row(0, r);
    end
    @(negedge clk); wload = 0;
    // stream set A; load set B from cycle K+L of the stream on
    for (int i = 0; i < 2 * NV; i++) begin
      @(negedge clk);
      wload = 1'b0;
      if (i >= K + L + 1 && i < 2 * K + L + 1) load_row(1, 2 * K + L - i);
      for (int k = 0; k < K; k++) vec[k] = act_t'(x[i][k]);
      vec_tag = (i == 0) || (i == NV);
      meta_in = '{valid: 1'b1, first: 1'b0, addr: SPM_AW'(i)};
      entry[i] = cyc;
      wset[i] = (i < NV) ? 0 : 1;
    end
    @(negedge clk);
    meta_in = '0; vec_tag = 0; wload = 0;
    repeat (K + L + 4) @(posedge clk);
    checks++;
    if (seen != 2 * NV * L) begin
      failures++;
      $display("FAIL outputs seen %0d", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
