// tb_lambda_pkg: checks the shared definitions every block relies on: the
// number of children per expression type (the amount the front stack
// pointer grows by when a node of that type is copied), the field widths of
// the two buses, that a Name's value fits a 7-bit character code in its two
// pointer fields, that ID 0 is free for "no node" with 16 nodes, and that the
// all-zero buses decode as "Undefined" and "no instruction".
// No clock: the watchdog is a fixed delay.
module tb_lambda_pkg;
  import lambda_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ebus_t e;
    ibus_t i;
    // children per type: Undefined 0, GoTo 1, Name 0, Application 2, Function 2
    check(n_children(EXP_UNDEF) == 2'd0, "Undefined has no children");
    check(n_children(EXP_GOTO)  == 2'd1, "GoTo has one child");
    check(n_children(EXP_NAME)  == 2'd0, "Name has no children");
    check(n_children(EXP_APP)   == 2'd2, "Application has two children");
    check(n_children(EXP_FUNC)  == 2'd2, "Function has two children");
    // widths
    check($bits(exp_t) == 3, "expression type is 3 bits");
    check($bits(ebus_t) == 1 + 3 + 2 * ID_W, "expression bus width");
    check($bits(ibus_t) == 4 + ID_W, "instruction bus width");
    check((1 << ID_W) - 1 >= NODES_DEFAULT, "16 node IDs plus NULL fit");
    check(2 * ID_W >= 7, "a Name value holds a 7-bit character");
    // all-zero buses are empty
    e = '0; i = '0;
    check(e.exr == EXP_UNDEF && !e.rsf, "empty expression bus is Undefined");
    check(i.ins == INS_NONE && i.uni == '0, "empty instruction bus is no instruction");
    // a Name's value round-trips through the two pointer fields
    for (int v = 0; v < (1 << (2 * ID_W)); v += 37) begin
      e = '{rsf: 1'b1, exr: EXP_NAME, clp: uid_t'(v >> ID_W), crp: uid_t'(v)};
      check({e.clp, e.crp} == (2 * ID_W)'(v), $sformatf("Name value %0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
