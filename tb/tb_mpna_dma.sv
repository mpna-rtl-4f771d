// tb_mpna_dma: one transfer channel wired straight to a behavioural DRAM
// (random back-pressure, in-order answers) and a buffer model with one cycle
// read latency. A 40-word load must land in the buffer at the right addresses;
// a 25-word store must write the buffer words to DRAM; done must pulse once
// per transfer; a zero-length transfer ends at once.
module tb_mpna_dma;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, dir = 0, busy, done;
  logic [31:0] dram_addr = '0;
  logic [15:0] buf_addr = '0, len = '0;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [31:0] req_addr;
  logic [63:0] req_wdata, rsp_data;
  logic buf_we, buf_re;
  logic [15:0] buf_a;
  logic [63:0] buf_wdata, buf_rdata;

  mpna_dma dut (.*);

  logic [63:0] dmem [1024];
  logic [63:0] bmem [1024];
  logic pv [3];
  logic [63:0] pd [3];
  int dones = 0;

  always @(posedge clk) begin
    req_ready <= ($urandom % 3) != 0;
    pv[0] <= req_valid && req_ready && !req_we;
    pd[0] <= dmem[req_addr[9:0]];
    pv[1] <= pv[0]; pd[1] <= pd[0];
    pv[2] <= pv[1]; pd[2] <= pd[1];
    if (req_valid && req_ready && req_we) dmem[req_addr[9:0]] <= req_wdata;
    if (buf_we) bmem[buf_a[9:0]] <= buf_wdata;
    if (buf_re) buf_rdata <= bmem[buf_a[9:0]];
    if (done) dones++;
  end
  assign rsp_valid = pv[2];
  assign rsp_data  = pd[2];

  task automatic run(input logic d, input int da, input int ba, input int n);
    @(negedge clk);
    dir = d; dram_addr = 32'(da); buf_addr = 16'(ba); len = 16'(n); start = 1;
    @(negedge clk); start = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) begin
      dmem[i] = {$urandom, $urandom}; bmem[i] = {$urandom, $urandom};
    end
    for (int i = 0; i < 3; i++) begin pv[i] = 0; pd[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 100, 500, 40);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (bmem[500 + i] !== dmem[100 + i]) begin failures++; $display("FAIL load word %0d", i); end
    end
    checks++;
    if (bmem[540] === dmem[140]) begin failures++; $display("FAIL load overran"); end
    run(1, 700, 20, 25);
    repeat (2) @(posedge clk);
    for (int i = 0; i < 25; i++) begin
      checks++;
      if (dmem[700 + i] !== bmem[20 + i]) begin failures++; $display("FAIL store word %0d", i); end
    end
    run(0, 0, 0, 0);
    repeat (2) @(posedge clk);
    checks++;
    if (dones != 3) begin failures++; $display("FAIL done pulses %0d", dones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
