// tb_mpna_accum: random accumulate/first writes into one accumulation
// sub-unit, compared with a model array; every entry is read back through the
// drain port, and a write becomes visible the cycle after it.
module tb_mpna_accum;
  import mpna_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  psum_t in_psum;
  meta_t in_meta;
  logic [SPM_AW-1:0] rd_addr;
  acc_t rd_data;

  mpna_accum dut (.*);

  longint model [SPM_DEPTH];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_meta = '0; in_psum = '0; rd_addr = '0;
    // clear every entry with a first write
    for (int a = 0; a < SPM_DEPTH; a++) begin
      @(negedge clk);
      in_meta = '{valid: 1'b1, first: 1'b1, addr: SPM_AW'(a)};
      in_psum = psum_t'(a);
      model[a] = a;
    end
    for (int i = 0; i < 5000; i++) begin
      int a;
      @(negedge clk);
      a = $urandom % SPM_DEPTH;
      in_meta.valid = ($urandom % 4) != 0;
      in_meta.first = ($urandom % 8) == 0;
      in_meta.addr  = SPM_AW'(a);
      in_psum = psum_t'($signed($urandom % 2000000) - 1000000);
      rd_addr = SPM_AW'($urandom);
      if (in_meta.valid) model[a] = in_meta.first ? longint'(in_psum) : longint'(acc_t'(model[a] + longint'(in_psum)));
      @(posedge clk); #1;
      checks++;
      if (longint'(rd_data) != longint'(acc_t'(model[rd_addr]))) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d got %0d exp %0d", rd_addr, rd_data, model[rd_addr]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
