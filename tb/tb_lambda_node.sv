// tb_lambda_node: drives one node (ID 5) through its expression types and
// instructions and compares its bus outputs and registers with values worked
// out by hand from the node's rules: UpdateExpression, Application routing in
// both Resolve states, ReturnExpression, Nullify, CompareValue, the Function's
// COMPARE -> TRANSFER -> RESOLVE sequence, BranchChop (by side and by ID), GoTo routing, the
// Ancestor and Descendant walks of a copy (with their one-step-per-cycle
// rate), GoToChop reclaim and UpdateChildLeft/Right.
`timescale 1ns/1ps
module tb_lambda_node;
  import lambda_pkg::*;

  localparam int ME = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  node_in_t   in;
  node_out_t  out;
  logic [1:0] nn_req;
  uid_t       nn_id1, nn_id2;
  logic       reclaim;
  exp_t       exr_o;
  logic       rsf_o;

  lambda_node #(.UNI(ME), .DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  function automatic ebus_t eb(logic r, exp_t e, int l, int rr);
    return '{rsf: r, exr: e, clp: uid_t'(l), crp: uid_t'(rr)};
  endfunction
  function automatic ibus_t ib(ins_t i, int u);
    return '{ins: i, uni: uid_t'(u)};
  endfunction

  task automatic step; @(posedge clk); #1; endtask

  task automatic load(exp_t e, int l, int r);
    in = '0; in.pib = ib(INS_UPDATE_EXP, ME); in.peb = eb(1, e, l, r);
    step; in = '0;
  endtask

  initial begin
    in = '0; nn_id1 = uid_t'(9); nn_id2 = uid_t'(10); reclaim = 0;
    #1; repeat (2) step; rst_n = 1; step;
    check(exr_o == EXP_UNDEF && out.peb == '0 && out.pib == '0, "reset: Undefined, silent");

    // UpdateExpression for another node is ignored, own ID accepted
    in.pib = ib(INS_UPDATE_EXP, 6); in.peb = eb(0, EXP_APP, 1, 2); step;
    check(exr_o == EXP_UNDEF, "update for other ID ignored");
    load(EXP_APP, 7, 8);
    check(exr_o == EXP_APP && out.clp == 7 && out.crp == 8 && out.clp_valid && out.crp_valid,
          "update sets App 7,8");
    check(rsf_o == 0, "update clears RSF");

    // Application, RSF low: cross routing (Fig 4 right)
    in.peb = eb(1, EXP_NAME, 1, 1); in.pib = ib(INS_MARK, 0);
    in.cle = eb(1, EXP_FUNC, 2, 3); in.cli = ib(INS_ANC_XFORM, 0);
    in.cre = eb(1, EXP_NAME, 4, 4); in.cri = ib(INS_MARK, 0);
    in.irf = 1; #1;
    check(out.cre == in.peb && out.cli == in.pib && out.cle == in.cre &&
          out.pib == in.cri && out.peb == in.cle && out.cri == in.cli, "App cross routing");
    check(out.irf_cl == 0 && out.irf_cr == 1, "App irreducible flags");
    // both children resolved -> RSF rises after one edge -> broadcast routing
    in.rsf_cl = 1; in.rsf_cr = 1; step;
    check(rsf_o == 1, "App RSF = AND of children");
    in.cli = ib(INS_MARK, 0); in.cri = ib(INS_NONE, 3); #1;
    check(out.cle == in.peb && out.cre == in.peb && out.cli == in.pib && out.cri == in.pib,
          "App raised: parent buses to both children");
    check(out.pib == ib(INS_MARK, 3), "App raised: children instructions OR-ed");
    check(out.peb == '0, "App raised: no expression upward");

    // ReturnExpression: own ID answers with own expression and Mark
    in = '0; in.rsf_cl = 1; in.rsf_cr = 1; in.pib = ib(INS_RETURN_EXP, ME); #1;
    check(out.peb == eb(1, EXP_APP, 7, 8) && out.pib.ins == INS_MARK, "ReturnExpression own");
    check(out.cli == in.pib && out.cri == in.pib, "ReturnExpression passed to children");
    // ... and a marked child's expression is passed up
    in.pib = ib(INS_RETURN_EXP, 8); in.cri = ib(INS_MARK, 0); in.cre = eb(1, EXP_NAME, 0, 7); #1;
    check(out.peb == in.cre && out.pib.ins == INS_MARK, "ReturnExpression from child right");

    // BranchChop from the right child: nullify it next cycle, then GoTo -> left child
    in = '0; in.rsf_cl = 1; in.rsf_cr = 1; in.cri = ib(INS_BRANCH_CHOP, 8); #1;
    check(out.pib == '0, "BranchChop consumed");
    step; in.cri = '0; #1;
    check(out.cri.ins == INS_NULLIFY, "chopped child receives Nullify");
    step;
    check(exr_o == EXP_GOTO && out.crp == 7 && !out.clp_valid && out.crp_valid,
          "App became GoTo keeping child left");

    // BranchChop naming the left pointer picks the left child, whichever side
    // it arrives from; naming neither picks the arriving side
    load(EXP_APP, 7, 8);
    in.rsf_cl = 1; in.rsf_cr = 1; in.cri = ib(INS_BRANCH_CHOP, 7); step; in.cri = '0; #1;
    check(out.cli.ins == INS_NULLIFY && out.cri.ins != INS_NULLIFY, "BranchChop by ID: left chopped");
    step;
    check(exr_o == EXP_GOTO && out.crp == 8, "App became GoTo keeping child right");
    load(EXP_APP, 7, 8);
    in.rsf_cl = 1; in.rsf_cr = 1; in.cli = ib(INS_BRANCH_CHOP, 12); step; in.cli = '0; #1;
    check(out.cli.ins == INS_NULLIFY, "BranchChop with unknown ID: arriving side chopped");
    step;
    check(exr_o == EXP_GOTO && out.crp == 8, "App became GoTo keeping the other child");

    // GoTo routing
    load(EXP_GOTO, 0, 7);
    in = '0; in.peb = eb(1, EXP_NAME, 3, 3); in.pib = ib(INS_MARK, 0);
    in.cre = eb(1, EXP_FUNC, 1, 2); in.cri = ib(INS_BRANCH_CHOP, 2); in.irf = 1; #1;
    check(out.peb == in.cre && out.pib == in.cri && out.cre == in.peb && out.cri == in.pib &&
          out.irf_cr == 1, "GoTo is a wire");

    // GoTo reclaim: offer with own expression, leave when acknowledged
    in = '0; reclaim = 1; #1;
    check(out.pib == ib(INS_GOTO_CHOP, ME) && out.peb.crp == 7, "GoTo offers itself");
    in.pib = ib(INS_GOTO_CHOP, 0); step; reclaim = 0; in = '0;
    check(exr_o == EXP_UNDEF, "acknowledged GoTo becomes Undefined");

    // Nullify
    load(EXP_FUNC, 3, 4);
    in.pib = ib(INS_NULLIFY, 0); #1;
    check(out.cli.ins == INS_NULLIFY && out.cri.ins == INS_NULLIFY, "Nullify passed on");
    step; in = '0;
    check(exr_o == EXP_UNDEF && out.clp == 0 && out.crp == 0, "Nullify clears the node");

    // UpdateChildLeft / UpdateChildRight
    load(EXP_APP, 1, 2);
    in.pib = ib(INS_UPDATE_CL, ME); in.peb = eb(0, EXP_UNDEF, 11, 12); step;
    check(out.clp == 11 && out.crp == 2, "UpdateChildLeft");
    in.pib = ib(INS_UPDATE_CR, ME); step; in = '0;
    check(out.clp == 11 && out.crp == 12, "UpdateChildRight");

    // Function reduction sequence
    load(EXP_FUNC, 6, 7);
    in.irf = 0; in.rsf_cl = 1; in.rsf_cr = 1;
    in.cle = eb(1, EXP_NAME, 0, 24);              // bound variable
    in.peb = eb(1, EXP_FUNC, 2, 3);               // resolved argument
    #1;
    check(out.peb.exr == EXP_FUNC && out.cre == in.peb, "Function default outputs");
    step;
    check(out.cri.ins == INS_COMPARE && out.cre == in.cle, "COMPARE sends the variable down");
    in.cri = ib(INS_MARK, 0); step;
    check(out.pib.ins == INS_ANC_XFORM && out.cri.ins == INS_DESC_XFORM && out.cre == in.peb,
          "TRANSFER drives both inputs");
    in.cri = '0; step;
    check(out.pib.ins == INS_ANC_XFORM, "TRANSFER holds until Mark");
    in.cri = ib(INS_MARK, 0); step; in.cri = '0; #1;
    check(out.pib.ins == INS_IMMED_RES && out.cli.ins == INS_NULLIFY, "RESOLVE");
    step;
    check(exr_o == EXP_GOTO && out.crp == 7 && !out.clp_valid, "reduced Function is a GoTo");
    // irreducible Function: no reduction, RSF follows the children
    load(EXP_FUNC, 6, 7);
    in.irf = 1; in.rsf_cl = 1; in.rsf_cr = 1; in.cle = eb(1, EXP_NAME, 0, 24);
    in.peb = eb(1, EXP_FUNC, 2, 3); step; step;
    check(out.cri.ins != INS_COMPARE && rsf_o == 1, "irreducible Function resolves, no COMPARE");
    in.pib = ib(INS_DESC_XFORM, 0); #1;
    check(out.cri.ins == INS_NONE, "Function blocks beta instructions to its body");
    in.pib = ib(INS_IMMED_RES, 0); #1;
    check(out.pib == ib(INS_BRANCH_CHOP, ME), "ImmediateResolution -> BranchChop");

    // Ancestor walk of Function 5 = (\a . b) with children 6, 7: 3 steps
    in = '0; in.irf = 1; in.rsf_cl = 1; in.rsf_cr = 1;
    in.pib = ib(INS_ANC_XFORM, 0); #1;
    check(out.peb == eb(1, EXP_FUNC, 6, 7) && out.cli.ins == INS_NONE, "Ancestor step 1: itself");
    step;
    check(out.cli == ib(INS_RETURN_EXP, 6) && out.cri == ib(INS_RETURN_EXP, 6), "Ancestor step 2 queries 6");
    in.cli = ib(INS_MARK, 0); in.cle = eb(1, EXP_NAME, 0, 1); #1;
    check(out.peb == in.cle, "Ancestor passes the returned expression up");
    step; in.cli = '0;
    check(out.cli == ib(INS_RETURN_EXP, 7), "Ancestor step 3 queries 7");
    in.cri = ib(INS_MARK, 0); in.cre = eb(1, EXP_NAME, 0, 2); #1;
    check(out.peb == in.cre, "Ancestor returns node 7");
    step; in.cri = '0; #1;
    check(out.peb == '0 && out.cli.ins == INS_NONE, "Ancestor walk finished after 3 steps");

    // Name as Descendant input, copying (\a.b)
    in = '0; load(EXP_NAME, 0, 24);
    in.pib = ib(INS_COMPARE, 0); in.peb = eb(1, EXP_NAME, 0, 25); #1;
    check(out.pib.ins == INS_NONE, "CompareValue: different name, no Mark");
    in.peb = eb(1, EXP_NAME, 0, 24); #1;
    check(out.pib.ins == INS_MARK, "CompareValue: equal name, Mark");
    step;
    in.pib = ib(INS_DESC_XFORM, 0); in.peb = eb(1, EXP_FUNC, 6, 7); #1;
    check(nn_req == 2, "Descendant asks for two new nodes");
    step;
    check(exr_o == EXP_NAME && out.clp == 9 && out.crp == 10 && out.clp_valid,
          "Descendant keeps Name type, points at new nodes");
    in.peb = eb(1, EXP_NAME, 0, 1); #1;
    check(nn_req == 0 && out.cli == ib(INS_UPDATE_EXP, 9) && out.cle == in.peb && out.pib == '0,
          "Descendant step 2 writes node 9");
    step;
    in.peb = eb(1, EXP_NAME, 0, 2); #1;
    check(out.cri == ib(INS_UPDATE_EXP, 10) && out.pib.ins == INS_MARK,
          "Descendant step 3 writes node 10 and marks completion");
    step; in = '0;
    check(exr_o == EXP_FUNC && out.clp == 9 && out.crp == 10, "Descendant became the Function");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
