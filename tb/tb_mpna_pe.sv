// tb_mpna_pe: self-checking test of one processing element (SA-FC variant,
// so both the shifted-weight path and the dedicated-weight path are covered).
// Random stimulus; the expected outputs come from a cycle model of the PE
// written from its description: data/tag/weight-chain registers, an active
// weight that takes the shifted weight when a tag arrives (or the dedicated
// weight every cycle in FC mode), and psum_out = psum_in + data_reg * active.
module tb_mpna_pe;
  import mpna_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic  fc_mode, wload, tag_in, tag_out;
  act_t  d_in, w_in, w_dir, d_out, w_out;
  psum_t ps_in, ps_out;

  mpna_pe #(.DIRECT_W(1'b1)) dut (.*);

  // reference state
  int r_d, r_wl, r_wa, r_ps, r_tag;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fc_mode = 0; wload = 0; tag_in = 0; d_in = 0; w_in = 0; w_dir = 0; ps_in = 0;
    r_d = 0; r_wl = 0; r_wa = 0; r_ps = 0; r_tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      fc_mode = (i >= 1000) && ($urandom % 4 != 0);
      wload   = $urandom % 2;
      tag_in  = ($urandom % 5) == 0;
      d_in    = act_t'($urandom);
      w_in    = act_t'($urandom);
      w_dir   = act_t'($urandom);
      ps_in   = psum_t'($signed($urandom % 200000) - 100000);
      // reference update at the coming edge
      @(posedge clk);
      r_ps  = int'(ps_in) + r_d * r_wa;
      if (fc_mode)     r_wa = int'(w_dir);
      else if (tag_in) r_wa = r_wl;
      if (wload) r_wl = int'(w_in);
      r_d   = int'(d_in);
      r_tag = int'(tag_in);
      #1;
      checks++;
      if (int'(d_out) != r_d || int'(tag_out) != r_tag || int'(w_out) != r_wl ||
          int'(ps_out) != r_ps) begin
        failures++;
        if (failures < 10) $display("FAIL cycle %0d: d %0d/%0d w %0d/%0d ps %0d/%0d", i,
          d_out, r_d, w_out, r_wl, ps_out, r_ps);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
