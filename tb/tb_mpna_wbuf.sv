// tb_mpna_wbuf: weight buffer. Fills every 64-bit lane of every word through
// the write port, then reads random words on both read ports at once and
// checks the data one cycle after the address; a read without enable must
// keep the previous output.
module tb_mpna_wbuf;
  import mpna_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic re_a, re_b, we;
  logic [WB_AW-1:0] addr_a, addr_b, waddr;
  logic [2:0] wlane;
  logic [63:0] wdata;
  act_t [K-1:0][L-1:0] rd_a, rd_b;

  mpna_wbuf dut (.*);

  function automatic logic [63:0] pat(input int w, input int l);
    return {w[15:0] ^ 16'h5a5a, l[15:0], w[15:0] * 16'd7 + l[15:0], 16'hc3c3 ^ w[15:0]};
  endfunction
  function automatic logic [511:0] word(input int w);
    logic [511:0] r;
    for (int l = 0; l < 8; l++) r[64*l +: 64] = pat(w, l);
    return r;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int wa, wb;
    logic [511:0] last_b;
    re_a = 0; re_b = 0; we = 0; addr_a = '0; addr_b = '0; waddr = '0; wlane = '0; wdata = '0;
    for (int w = 0; w < WB_DEPTH; w++)
      for (int l = 0; l < 8; l++) begin
        @(negedge clk);
        we = 1; waddr = WB_AW'(w); wlane = 3'(l); wdata = pat(w, l);
      end
    @(negedge clk); we = 0;
    for (int i = 1; i < 1000; i++) begin
      wa = $urandom % WB_DEPTH; wb = $urandom % WB_DEPTH;
      re_a = 1; re_b = (i % 3) != 0;
      addr_a = WB_AW'(wa); addr_b = WB_AW'(wb);
      if (re_b) last_b = word(wb);
      @(negedge clk);
      checks++;
      if (rd_a !== word(wa) || rd_b !== last_b) begin
        failures++;
        if (failures < 10) $display("FAIL read %0d/%0d", wa, wb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
