// tb_work_cluster: the worked example of the beta-reduction walk-through,
// (x (\y.y)) (\z.z) -> x (\z.z), on a bare work cluster driven through its
// root port. Nodes are numbered breadth first: 1 App, 2 App, 3 \z, 4 x,
// 5 \y, 6 z, 7 z, 8 y, 9 y. Checks:
//  * the stack pointers of the Ancestor input (node 3) and the Descendant
//    input (node 9) step together: FSP 1 -> 3 after the first copy step,
//    BSP 1, 2, 3, and the copy ends when BSP = FSP = 3;
//  * the final graph node by node: root and reduced Function are GoTo nodes,
//    node 9 has become \z with two new nodes (10, 11) holding z, the
//    discarded nodes 3, 6, 7, 8 are Undefined;
//  * the reduced graph read back through ReturnExpression at the root.
`timescale 1ns/1ps
module tb_work_cluster;
  import lambda_pkg::*;
  localparam int unsigned NODES = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ebus_t ext_peb = '0, root_peb;
  ibus_t ext_pib = '0, root_pib;
  logic  ext_irf = 1, root_rsf, reclaim, exhausted;
  exp_t  node_exr [NODES];
  logic  node_rsf [NODES];
  logic [$clog2(NODES+1)-1:0] n_free;

  work_cluster #(.NODES(NODES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic ebus_t eb(exp_t e, int l, int r);
    return '{rsf: 1'b0, exr: e, clp: uid_t'(l), crp: uid_t'(r)};
  endfunction

  // stack pointers of the two inputs
  logic [4:0] a_fsp, a_bsp, d_fsp, d_bsp;
  assign a_fsp = dut.g_node[2].u_node.fsp;
  assign a_bsp = dut.g_node[2].u_node.bsp;
  assign d_fsp = dut.g_node[8].u_node.fsp;
  assign d_bsp = dut.g_node[8].u_node.bsp;

  int steps = 0, pulses = 0;
  logic [4:0] fsp_seen [8];
  logic [4:0] bsp_seen [8];
  always @(posedge clk) if (rst_n) begin
    if (dut.nin[2].pib.ins == INS_ANC_XFORM && a_bsp != a_fsp) begin
      #1;
      if (steps < 8) begin fsp_seen[steps] = a_fsp; bsp_seen[steps] = a_bsp; end
      checks++;
      if (a_bsp != d_bsp) begin failures++; $display("FAIL inputs out of step"); end
      steps++;
    end
  end

  initial begin
    ebus_t prog [9];

    prog = '{eb(EXP_APP, 2, 3), eb(EXP_APP, 4, 5), eb(EXP_FUNC, 6, 7),
             eb(EXP_NAME, 0, 24), eb(EXP_FUNC, 8, 9), eb(EXP_NAME, 0, 26),
             eb(EXP_NAME, 0, 26), eb(EXP_NAME, 0, 25), eb(EXP_NAME, 0, 25)};
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 9; i++) begin
      @(negedge clk);
      ext_pib = '{ins: INS_UPDATE_EXP, uni: uid_t'(i + 1)}; ext_peb = prog[i];
    end
    @(negedge clk); ext_pib = '0; ext_peb = '0;
    while (!root_rsf && pulses < 200) begin @(negedge clk); pulses++; end
    check(root_rsf, "root Resolve Flag raised");
    $display("reduced in %0d clock pulses, %0d copy steps", pulses, steps);
    check(steps == 3, $sformatf("3 copy steps, saw %0d", steps));
    check(fsp_seen[0] == 3 && bsp_seen[0] == 1, "after step 1: FSP 3, BSP 1");
    check(fsp_seen[1] == 3 && bsp_seen[1] == 2, "after step 2: FSP 3, BSP 2");
    check(fsp_seen[2] == 3 && bsp_seen[2] == 3, "after step 3: BSP = FSP = 3");
    // final graph
    check(node_exr[0] == EXP_GOTO, "root became GoTo");
    check(node_exr[1] == EXP_APP, "node 2 still App");
    check(node_exr[3] == EXP_NAME, "node 4 Name x");
    check(node_exr[4] == EXP_GOTO, "reduced Function became GoTo");
    check(node_exr[8] == EXP_FUNC, "Descendant input became a Function");
    check(node_exr[9] == EXP_NAME && node_exr[10] == EXP_NAME, "new nodes 10, 11 are Names");
    for (int k = 0; k < NODES; k++)
      if (k inside {2, 5, 6, 7} || k > 10) check(node_exr[k] == EXP_UNDEF, $sformatf("node %0d Undefined", k + 1));
    // read back through the root
    begin
      ebus_t want [11];
      want = '{'{1, EXP_GOTO, 0, 2}, '{1, EXP_APP, 4, 5}, '0, '{1, EXP_NAME, 0, 24},
               '{1, EXP_GOTO, 0, 9}, '0, '0, '0, '{1, EXP_FUNC, 10, 11},
               '{1, EXP_NAME, 0, 26}, '{1, EXP_NAME, 0, 26}};
      for (int k = 0; k < 11; k++) begin
        @(negedge clk); ext_pib = '{ins: INS_RETURN_EXP, uni: uid_t'(k + 1)}; #1;
        if (want[k].exr == EXP_UNDEF)
          check(root_pib.ins != INS_MARK, $sformatf("node %0d not in the tree", k + 1));
        else
          check(root_pib.ins == INS_MARK && root_peb == want[k],
                $sformatf("node %0d read back %p", k + 1, root_peb));
      end
      @(negedge clk); ext_pib = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
