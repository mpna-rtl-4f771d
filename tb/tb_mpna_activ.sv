// tb_mpna_activ: exhaustive over the 8-bit input for a set of slopes:
// bypass, ReLU (negative -> 0) and Leaky-ReLU (negative -> alpha*x, alpha/128,
// truncated towards zero, saturated).
module tb_mpna_activ;
  import mpna_pkg::*;
  int checks = 0, failures = 0;
  act_t act_in, alpha, act_out;
  act_e ctrl;

  mpna_activ dut (.*);

  function automatic int ref_act(input int x, input int a, input act_e c);
    int m, r;
    if (c == ACT_NONE || x >= 0) return x;
    if (c == ACT_RELU) return 0;
    m = ((x < 0 ? -x : x) * (a < 0 ? -a : a)) >>> 7;
    r = ((x < 0) != (a < 0)) ? -m : m;
    if (r > 127) r = 127;
    if (r < -128) r = -128;
    return r;
  endfunction

  initial begin
    int alphas [6] = '{0, 13, 26, 64, 127, -128};
    foreach (alphas[ai])
      for (int c = 0; c < 3; c++)
        for (int x = -128; x < 128; x++) begin
          act_in = act_t'(x); alpha = act_t'(alphas[ai]); ctrl = act_e'(c);
          #1;
          checks++;
          if (int'(act_out) != ref_act(x, alphas[ai], act_e'(c))) begin
            failures++;
            if (failures < 10) $display("FAIL x=%0d a=%0d c=%0d got %0d", x, alphas[ai], c, act_out);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
