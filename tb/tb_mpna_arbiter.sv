// tb_mpna_arbiter: two channels issue random reads and writes through the
// arbiter to a behavioural DRAM with random back-pressure and in-order
// answers (data = a function of the address). Every answer must reach the
// channel that asked, in order, with the right data, and every write must
// reach the DRAM. A second phase keeps both channels requesting with the DRAM
// always ready: the grants must alternate (round robin).
module tb_mpna_arbiter;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0]       req_valid, req_ready, req_we, rsp_valid;
  logic [1:0][31:0] req_addr;
  logic [1:0][63:0] req_wdata;
  logic [63:0]      rsp_data;
  logic             dram_valid, dram_ready, dram_we, dram_rvalid;
  logic [31:0]      dram_addr;
  logic [63:0]      dram_wdata, dram_rdata;

  mpna_arbiter #(.N(2)) dut (.*);

  function automatic logic [63:0] f(input logic [31:0] a);
    return {a, ~a} ^ 64'h0123_4567_89ab_cdef;
  endfunction

  // DRAM: latency 3
  logic pv [3];
  logic [63:0] pd [3];
  int   writes_seen = 0;
  bit   always_ready = 0;
  always @(posedge clk) begin
    dram_ready <= always_ready || ($urandom % 3 != 0);
    pv[0] <= dram_valid && dram_ready && !dram_we;
    pd[0] <= f(dram_addr);
    pv[1] <= pv[0]; pd[1] <= pd[0];
    pv[2] <= pv[1]; pd[2] <= pd[1];
    if (dram_valid && dram_ready && dram_we) begin
      writes_seen++;
      checks++;
      if (dram_wdata != f(dram_addr) + 1) begin failures++; $display("FAIL write data"); end
    end
  end
  assign dram_rvalid = pv[2];
  assign dram_rdata  = pd[2];

  // expected answers per channel
  logic [63:0] expq [2][$];
  int issued [2], writes_issued = 0, answered = 0;
  int last_gnt = -1, alt_fail = 0, alt_checks = 0;
  bit phase2 = 0;

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) begin
      if (rsp_valid[c]) begin
        checks++; answered++;
        if (expq[c].size() == 0 || rsp_data != expq[c][0]) begin
          failures++;
          if (failures < 10) $display("FAIL channel %0d answer", c);
        end
        if (expq[c].size() != 0) void'(expq[c].pop_front());
      end
      if (req_valid[c] && req_ready[c]) begin
        if (!req_we[c]) expq[c].push_back(f(req_addr[c]));
        // round robin: with both channels waiting, the other one goes
        if (req_valid == 2'b11) begin
          alt_checks++;
          if (last_gnt == c) alt_fail++;
        end
        last_gnt = c;
      end
    end
    checks++;
    if (req_ready[0] && req_ready[1]) begin failures++; $display("FAIL two grants"); end
  end

  // requesters
  for (genvar c = 0; c < 2; c++) begin : g_req
    initial begin
      req_valid[c] = 0; req_we[c] = 0; req_addr[c] = '0; req_wdata[c] = '0;
      wait (rst_n);
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        if (!phase2 && $urandom % 3 == 0) begin req_valid[c] = 0; continue; end
        req_valid[c] = 1;
        req_we[c] = !phase2 && ($urandom % 4 == 0);
        req_addr[c] = 32'(c * 32'h1000 + n);
        req_wdata[c] = f(req_addr[c]) + 1;
        if (req_we[c]) writes_issued++;
        @(posedge clk);
        while (!req_ready[c]) @(posedge clk);
      end
      @(negedge clk);
      req_valid[c] = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3; i++) begin pv[i] = 0; pd[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (300) @(posedge clk);
    phase2 = 1; always_ready = 1;
    repeat (2000) @(posedge clk);
    checks++;
    if (expq[0].size() != 0 || expq[1].size() != 0 || writes_seen != writes_issued) begin
      failures++;
      $display("FAIL left %0d/%0d writes %0d/%0d", expq[0].size(), expq[1].size(), writes_seen, writes_issued);
    end
    checks++;
    if (alt_fail > 0 || alt_checks < 20) begin
      failures++;
      $display("FAIL round robin: %0d repeats in %0d grants", alt_fail, alt_checks);
    end
    $display("answers %0d, grants in phase 2 %0d", answered, alt_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
