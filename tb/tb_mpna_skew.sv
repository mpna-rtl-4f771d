// tb_mpna_skew: checks that row k of the input vector and the tag leave the
// skew unit exactly k cycles after they entered (row 0 without delay).
module tb_mpna_skew;
  import mpna_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  act_t [K-1:0] d_in, d_out;
  logic tag_in;
  logic [K-1:0] tag_out;

  mpna_skew dut (.*);

  act_t [K-1:0] hist_d [64];
  logic         hist_t [64];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_in = '0; tag_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      d_in = {$urandom, $urandom};
      tag_in = $urandom % 2;
      hist_d[t % 64] = d_in;
      hist_t[t % 64] = tag_in;
      #1;
      if (t >= K) begin
        for (int k = 0; k < K; k++) begin
          checks++;
          if (d_out[k] !== hist_d[(t - k) % 64][k] || tag_out[k] !== hist_t[(t - k) % 64]) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d row %0d", t, k);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
