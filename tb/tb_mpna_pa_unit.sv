// tb_mpna_pa_unit: one pooling and activation sub-unit.
// Test 1 streams a 6x6 map of accumulator values in row order with the
// 2x2/stride-2 pooling commands (pair on odd columns, stored value on odd
// rows, activation only on the last row of a window) and Leaky-ReLU; the 3x3
// results are read back and compared with requantise -> max -> activate done
// here. Test 2 streams 20 values without pooling and with ReLU. Test 3 sends
// two results to the same address back to back, which needs the forwarding
// of the pooled value still in the register.
module tb_mpna_pa_unit;
  import mpna_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  acc_t    accu;
  logic    in_valid;
  pa_cmd_t in_cmd;
  logic [4:0] shift;
  act_t    alpha;
  logic [SPM_AW-1:0] rd_addr;
  act_t    pa_out;

  mpna_pa_unit dut (.*);

  localparam int ALPHA = 26, SH = 4;
  int v [6][6];

  function automatic int rq(input int x);
    int s;
    s = x >>> SH;
    return s > 127 ? 127 : (s < -128 ? -128 : s);
  endfunction
  function automatic int act_ref(input int x, input act_e a);
    if (x >= 0 || a == ACT_NONE) return x;
    if (a == ACT_RELU) return 0;
    return -(((-x) * ALPHA) >>> 7);
  endfunction
  task automatic chk(input int addr, input int e, input string what);
    rd_addr = SPM_AW'(addr);
    #1;
    checks++;
    if (int'(pa_out) != e) begin
      failures++;
      if (failures < 10) $display("FAIL %s addr %0d: %0d exp %0d", what, addr, pa_out, e);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    accu = '0; in_valid = 0; in_cmd = '0; shift = SH; alpha = ALPHA; rd_addr = '0;
    foreach (v[r, c]) v[r][c] = $signed($urandom % 6000) - 3000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // test 1: 2x2 pooling + leaky
    for (int r = 0; r < 6; r++)
      for (int c = 0; c < 6; c++) begin
        @(negedge clk);
        accu = acc_t'(v[r][c]);
        in_valid = 1;
        in_cmd = '{fire: c[0], pair: 1'b1, use_spm: r[0], act: (r[0] ? ACT_LEAKY : ACT_NONE),
                   addr: SPM_AW'((r / 2) * 3 + c / 2)};
      end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        int m;
        m = -1000;
        for (int dr = 0; dr < 2; dr++)
          for (int dc = 0; dc < 2; dc++)
            if (rq(v[2*r+dr][2*c+dc]) > m) m = rq(v[2*r+dr][2*c+dc]);
        chk(r * 3 + c, act_ref(m, ACT_LEAKY), "pool");
      end
    // test 2: no pooling, relu
    for (int i = 0; i < 20; i++) begin
      @(negedge clk);
      accu = acc_t'(v[i / 6][i % 6]);
      in_valid = 1;
      in_cmd = '{fire: 1'b1, pair: 1'b0, use_spm: 1'b0, act: ACT_RELU, addr: SPM_AW'(100 + i)};
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    for (int i = 0; i < 20; i++) chk(100 + i, act_ref(rq(v[i / 6][i % 6]), ACT_RELU), "relu");
    // test 3: back-to-back results at one address (max of two values)
    @(negedge clk);
    accu = acc_t'(v[0][0]); in_valid = 1;
    in_cmd = '{fire: 1'b1, pair: 1'b0, use_spm: 1'b0, act: ACT_NONE, addr: SPM_AW'(200)};
    @(negedge clk);
    accu = acc_t'(v[0][1]);
    in_cmd = '{fire: 1'b1, pair: 1'b0, use_spm: 1'b1, act: ACT_NONE, addr: SPM_AW'(200)};
    @(negedge clk); in_valid = 0;
    repeat (4) @(posedge clk);
    @(negedge clk);
    chk(200, rq(v[0][0]) > rq(v[0][1]) ? rq(v[0][0]) : rq(v[0][1]), "forward");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
