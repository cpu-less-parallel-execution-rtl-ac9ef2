// tb_node_stack: checks the per-node ID queue RAM: single and double writes
// at the front pointer, asynchronous read at any address, and that writes at
// or beyond DEPTH are dropped. Reference: a plain array model in the testbench.
`timescale 1ns/1ps
module tb_node_stack;
  import lambda_pkg::*;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned AW = $clog2(DEPTH + 1);

  logic clk = 0;
  always #5 clk = ~clk;
  logic we1 = 0, we2 = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  uid_t wdata1 = '0, wdata2 = '0, rdata;

  node_stack #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  uid_t model [DEPTH];

  initial begin
    // fill with known values through single writes
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we1 = 1; we2 = 0; waddr = AW'(a); wdata1 = uid_t'(a + 3);
      model[a] = uid_t'(a + 3);
    end
    @(negedge clk); we1 = 0;
    // random single/double writes and reads
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      we1 = 1'($urandom); we2 = we1 & 1'($urandom);
      waddr = AW'($urandom_range(0, DEPTH));
      wdata1 = uid_t'($urandom); wdata2 = uid_t'($urandom);
      if (we1 && 32'(waddr) < DEPTH) model[waddr] = wdata1;
      if (we2 && 32'(waddr) + 1 < DEPTH) model[32'(waddr) + 1] = wdata2;
      @(posedge clk); #1;
      we1 = 0; we2 = 0;
      for (int a = 0; a < DEPTH; a++) begin
        raddr = AW'(a); #1;
        checks++;
        if (rdata !== model[a]) begin
          failures++;
          if (failures < 10) $display("FAIL addr %0d got %0d expected %0d", a, rdata, model[a]);
        end
      end
    end
    // reading beyond DEPTH returns 0
    raddr = AW'(DEPTH); #1; checks++;
    if (rdata !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
