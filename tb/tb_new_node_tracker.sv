// tb_new_node_tracker: drives random node states and random requests and
// checks that every grant is a free node (Undefined, not node 1, not reserved),
// that grants within a cycle are distinct and in node order from the lowest
// free ID, that a shortage is flagged exactly when requests exceed free nodes,
// that reclaim is raised exactly when no node is free, and that a granted
// node is not granted again while it stays Undefined.
`timescale 1ns/1ps
module tb_new_node_tracker;
  import lambda_pkg::*;
  localparam int unsigned NODES = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  exp_t       exr [NODES];
  logic [1:0] req [NODES];
  uid_t       id1 [NODES], id2 [NODES];
  logic       reclaim, exhausted;
  logic [$clog2(NODES+1)-1:0] n_free;

  new_node_tracker #(.NODES(NODES)) dut (.*);

  int checks = 0, failures = 0;
  bit res_model [NODES];

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    for (int k = 0; k < NODES; k++) begin exr[k] = EXP_UNDEF; req[k] = 0; res_model[k] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      bit free [NODES];
      int nfree, want, given, expect_id;
      @(negedge clk);
      for (int k = 0; k < NODES; k++) begin
        if ($urandom_range(0, 3) == 0) exr[k] = ($urandom_range(0, 1) == 0) ? EXP_UNDEF : EXP_NAME;
        req[k] = 2'($urandom_range(0, 7) == 0 ? $urandom_range(1, 2) : 0);
      end
      // keep the graph mostly full now and then, to provoke shortages
      if (n % 50 < 10) for (int k = 0; k < NODES; k++) exr[k] = EXP_APP;
      #1;
      nfree = 0; want = 0;
      for (int k = 0; k < NODES; k++) begin
        free[k] = (exr[k] == EXP_UNDEF) && !res_model[k] && k != 0;
        if (free[k]) nfree++;
        want += req[k];
      end
      check(reclaim == (nfree == 0), $sformatf("reclaim=%0d with %0d free", reclaim, nfree));
      check(32'(n_free) == nfree, "n_free");
      check(exhausted == (want > nfree), $sformatf("exhausted=%0d want=%0d free=%0d", exhausted, want, nfree));
      // expected grants: lowest free IDs in node order
      expect_id = 0; given = 0;
      for (int i = 0; i < NODES; i++) begin
        for (int m = 0; m < int'(req[i]); m++) begin
          int exp_v;
          uid_t got;
          exp_v = 0;
          while (expect_id < NODES && !free[expect_id]) expect_id++;
          if (expect_id < NODES) begin exp_v = expect_id + 1; expect_id++; end
          got = (m == 0) ? id1[i] : id2[i];
          check(int'(got) == exp_v, $sformatf("node %0d grant %0d got %0d expected %0d", i + 1, m, got, exp_v));
          if (exp_v != 0) res_model[exp_v - 1] = 1;
        end
        if (req[i] == 0) check(id1[i] == '0 && id2[i] == '0, "no request, no grant");
      end
      @(posedge clk); #1;
      for (int k = 0; k < NODES; k++) if (exr[k] != EXP_UNDEF) res_model[k] = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
