// tb_mpna_dbuf: data buffer. Random reads and writes on both ports against a
// model of a slice of the memory; reads return data one cycle after the
// address; a write on the DRAM-side port wins over a write to the same word
// on the compute port.
module tb_mpna_dbuf;
  import mpna_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic re_c, we_c, re_x, we_x;
  logic [DB_AW-1:0] addr_c, addr_x;
  logic [63:0] wdata_c, wdata_x, rdata_c, rdata_x;

  mpna_dbuf dut (.*);

  localparam int R = 64;          // region exercised, at the bottom and top
  logic [63:0] model [2*R];
  function automatic int rw(input int i);   // region index -> word address
    return i < R ? i : DB_DEPTH - 2 * R + i;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] ec, ex;
    re_c = 0; we_c = 0; re_x = 0; we_x = 0; addr_c = '0; addr_x = '0; wdata_c = '0; wdata_x = '0;
    for (int i = 0; i < 2 * R; i++) begin
      @(negedge clk);
      we_x = 1; addr_x = DB_AW'(rw(i)); wdata_x = {$urandom, $urandom}; model[i] = wdata_x;
    end
    @(negedge clk); we_x = 0;
    for (int n = 0; n < 3000; n++) begin
      int ic, ix;
      ic = $urandom % (2 * R); ix = (n % 5 == 0) ? ic : $urandom % (2 * R);
      re_c = 1; re_x = 1;
      we_c = $urandom % 2; we_x = $urandom % 2;
      addr_c = DB_AW'(rw(ic)); addr_x = DB_AW'(rw(ix));
      wdata_c = {$urandom, $urandom}; wdata_x = {$urandom, $urandom};
      ec = model[ic]; ex = model[ix];           // read-before-write
      if (we_c) model[ic] = wdata_c;
      if (we_x) model[ix] = wdata_x;
      @(negedge clk);
      checks++;
      if (rdata_c !== ec || rdata_x !== ex) begin
        failures++;
        if (failures < 10) $display("FAIL %0d: c %h/%h x %h/%h", n, rdata_c, ec, rdata_x, ex);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
