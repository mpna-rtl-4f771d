// tb_mpna_pool: random test of the three-input max of the pool unit with
// every combination of the input enables.
module tb_mpna_pool;
  import mpna_pkg::*;
  int checks = 0, failures = 0;
  act_t in1, in2, in3, max_out;
  logic use1, use3;

  mpna_pool dut (.*);

  initial begin
    for (int i = 0; i < 4000; i++) begin
      int e;
      in1 = act_t'($urandom); in2 = act_t'($urandom); in3 = act_t'($urandom);
      use1 = $urandom % 2; use3 = $urandom % 2;
      #1;
      e = int'(in2);
      if (use1 && int'(in1) > e) e = int'(in1);
      if (use3 && int'(in3) > e) e = int'(in3);
      checks++;
      if (int'(max_out) != e) begin
        failures++;
        if (failures < 10) $display("FAIL %0d %0d %0d u%0d%0d -> %0d exp %0d", in1, in2, in3, use1, use3, max_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
