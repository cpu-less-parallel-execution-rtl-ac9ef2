// tb_lambda_top: end-to-end test of the reducer. Builds each test expression
// of the original's validation table as a graph in the testbench, loads it
// through the root node, lets the cluster reduce it, reads the graph back and
// compares the printed result with the expected normal form, which the
// testbench builds and prints on its own. Also checks clock-pulse counts
// against the bounds below and counts how often each mechanism of the design
// occurred (compare, copy, immediate resolution, branch chop, nullify, GoTo
// reclaim, parallel copies, running out of nodes, time-out).
`timescale 1ns/1ps
module tb_lambda_top;
  import lambda_pkg::*;

  localparam int unsigned NODES = NODES_DEFAULT;
  localparam int unsigned AW = $clog2(NODES + 1);
  localparam int unsigned IW = $clog2(NODES);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          prog_we = 0;
  logic [IW-1:0] prog_addr = '0;
  prog_word_t    prog_data = '0;
  logic [AW-1:0] prog_len = '0;
  logic          start = 0;
  logic          busy, done, timed_out, ran_short;
  logic [31:0]   cycles;
  logic [AW-1:0] max_used;
  logic [IW-1:0] out_addr = '0;
  ebus_t         out_data;
  exp_t          node_exr [NODES];
  logic          node_rsf [NODES];
  logic          reclaim;
  logic [AW-1:0] n_free;

  lambda_top dut (.*);

  int checks = 0, failures = 0;

  // ---------------- testbench-side expression trees ----------------
  int t_exr [64];
  int t_l [64], t_r [64];
  int t_val [64];
  int t_n;

  function automatic int mk_name(byte c);
    t_exr[t_n] = EXP_NAME; t_val[t_n] = c; t_l[t_n] = -1; t_r[t_n] = -1;
    t_n++; return t_n - 1;
  endfunction
  function automatic int mk_app(int a, int b);
    t_exr[t_n] = EXP_APP; t_l[t_n] = a; t_r[t_n] = b; t_val[t_n] = 0;
    t_n++; return t_n - 1;
  endfunction
  function automatic int mk_fun(byte v, int body);
    int vn;
    vn = mk_name(v);
    t_exr[t_n] = EXP_FUNC; t_l[t_n] = vn; t_r[t_n] = body; t_val[t_n] = 0;
    t_n++; return t_n - 1;
  endfunction
  function automatic int mk_goto(int c);
    t_exr[t_n] = EXP_GOTO; t_l[t_n] = -1; t_r[t_n] = c; t_val[t_n] = 0;
    t_n++; return t_n - 1;
  endfunction
  function automatic int id_fun(byte v);
    return mk_fun(v, mk_name(v));
  endfunction

  function automatic string t_print(int k);
    case (t_exr[k])
      EXP_NAME: return $sformatf("%c", t_val[k]);
      EXP_APP:  return {"(", t_print(t_l[k]), " ", t_print(t_r[k]), ")"};
      EXP_FUNC: return {"(\\", t_print(t_l[k]), ".", t_print(t_r[k]), ")"};
      EXP_GOTO: return t_print(t_r[k]);
      default:  return "?";
    endcase
  endfunction

  // ---------------- result read back from the output RAM ----------------
  ebus_t res [NODES];

  function automatic string r_print(int id, int depth);
    ebus_t e;
    if (id < 1 || id > NODES || depth > 40) return "!";
    e = res[id-1];
    case (e.exr)
      EXP_NAME: return $sformatf("%c", {e.clp, e.crp});
      EXP_GOTO: return r_print(int'(e.crp), depth + 1);
      EXP_APP:  return {"(", r_print(int'(e.clp), depth + 1), " ",
                        r_print(int'(e.crp), depth + 1), ")"};
      EXP_FUNC: return {"(\\", r_print(int'(e.clp), depth + 1), ".",
                        r_print(int'(e.crp), depth + 1), ")"};
      default:  return "U";
    endcase
  endfunction

  // ---------------- mechanism counters (observed at the nodes) ----------------
  int n_compare = 0, n_copy_steps = 0, n_immres = 0, n_bchop = 0, n_nullify = 0;
  int n_gotochop = 0, n_parallel = 0, n_short = 0, n_timeout = 0, n_return = 0;
  int n_reduce = 0;
  int last_cycles;

  logic       rdf_v [NODES];
  logic [1:0] fph_v [NODES];
  for (genvar g = 0; g < NODES; g++) begin : g_probe
    assign rdf_v[g] = dut.u_cluster.g_node[g].u_node.rdf;
    assign fph_v[g] = dut.u_cluster.g_node[g].u_node.fph;
  end

  always @(posedge clk) if (rst_n) begin
    int desc;
    desc = 0;
    for (int k = 0; k < NODES; k++) begin
      ibus_t pin;
      pin = dut.u_cluster.nin[k].pib;
      if (dut.u_cluster.nout[k].cri.ins == INS_COMPARE) n_compare++;
      if (pin.ins == INS_ANC_XFORM && node_exr[k] inside {EXP_NAME, EXP_FUNC}) n_copy_steps++;
      if (pin.ins == INS_DESC_XFORM && node_exr[k] == EXP_NAME &&
          rdf_v[k]) desc++;
      if (pin.ins == INS_IMMED_RES && node_exr[k] inside {EXP_NAME, EXP_FUNC}) n_immres++;
      if (dut.u_cluster.nout[k].pib.ins == INS_BRANCH_CHOP) n_bchop++;
      if (pin.ins == INS_NULLIFY && node_exr[k] != EXP_UNDEF) n_nullify++;
      if (node_exr[k] == EXP_GOTO && pin.ins == INS_GOTO_CHOP) n_gotochop++;
      if (pin.ins == INS_RETURN_EXP && k != 0) n_return++;
      if (fph_v[k] == 2'd3) n_reduce++;
    end
    if (desc > 1) n_parallel++;
  end

  // ---------------- one test ----------------
  task automatic run_test(string label, int root, int exp_root, bit expect_ok,
                          int max_pulses);
    int id_of [64];
    int order [64];
    int head, tail, nn;
    string got, want;
    // breadth-first numbering: parents get lower IDs and load first
    for (int k = 0; k < 64; k++) id_of[k] = 0;
    head = 0; tail = 0;
    order[tail++] = root;
    while (head < tail) begin
      int k;
      k = order[head++];
      if (t_exr[k] == EXP_APP || t_exr[k] == EXP_FUNC) begin
        order[tail++] = t_l[k];
        order[tail++] = t_r[k];
      end else if (t_exr[k] == EXP_GOTO) order[tail++] = t_r[k];
    end
    nn = tail;
    for (int i = 0; i < nn; i++) id_of[order[i]] = i + 1;
    want = t_print(exp_root);
    if (nn > NODES) begin
      $display("[%s] graph needs %0d nodes, cluster has %0d: skipped", label, nn, NODES);
      return;
    end
    // reset the cluster between tests
    rst_n = 0; repeat (2) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int i = 0; i < nn; i++) begin
      int k;
      ebus_t e;
      k = order[i];
      e.rsf = 1'b0;
      e.exr = exp_t'(t_exr[k]);
      if (t_exr[k] == EXP_NAME) {e.clp, e.crp} = t_val[k][2*ID_W-1:0];
      else if (t_exr[k] == EXP_GOTO) begin e.clp = '0; e.crp = uid_t'(id_of[t_r[k]]); end
      else begin e.clp = uid_t'(id_of[t_l[k]]); e.crp = uid_t'(id_of[t_r[k]]); end
      @(negedge clk);
      prog_we = 1; prog_addr = IW'(i); prog_data = '{uni: uid_t'(i + 1), e: e};
    end
    @(negedge clk); prog_we = 0; prog_len = AW'(nn); start = 1;
    @(negedge clk); start = 0;
    wait (done);
    for (int k = 0; k < NODES; k++) begin
      out_addr = IW'(k); #1; res[k] = out_data;
    end
    got = r_print(1, 0);
    last_cycles = int'(cycles);
    if (timed_out) n_timeout++;
    if (ran_short) n_short++;
    checks++;
    if (expect_ok) begin
      if (got != want || timed_out || ran_short) begin
        failures++;
        $display("FAIL [%s] got %s expected %s (timeout=%0d short=%0d)", label, got, want,
                 timed_out, ran_short);
      end else
        $display("ok   [%s] %s -> %s in %0d clock pulses, %0d nodes used",
                 label, t_print(root), got, cycles, max_used);
      checks++;
      if (int'(cycles) > max_pulses) begin
        failures++;
        $display("FAIL [%s] %0d clock pulses, bound %0d", label, cycles, max_pulses);
      end
    end else begin
      // expressions the original reports as failing: only require that the
      // cluster stops and flags the cause
      if (!(timed_out || ran_short || got != want)) begin
        failures++;
        $display("FAIL [%s] expected a flagged failure, got %s", label, got);
      end else
        $display("ok   [%s] %s -> %s (timeout=%0d short=%0d), as in the original",
                 label, t_print(root), got, timed_out, ran_short);
    end
  endtask

  initial begin
    int a, b, e, c3;
    // 1: x
    t_n = 0; a = mk_name("x");
    run_test("1", a, a, 1, 4);
    // 2: xxxx
    t_n = 0; a = mk_app(mk_app(mk_app(mk_name("x"), mk_name("x")), mk_name("x")), mk_name("x"));
    run_test("2", a, a, 1, 6);
    // 3: (\x.x)y
    t_n = 0; a = mk_app(id_fun("x"), mk_name("y")); e = mk_name("y");
    run_test("3", a, e, 1, 20);
    c3 = last_cycles;
    // 4: (\x.y)(\z.z)
    t_n = 0; a = mk_app(mk_fun("x", mk_name("y")), id_fun("z")); e = mk_name("y");
    run_test("4", a, e, 1, 30);
    // 5: x(\y.y)(\z.z), read as (x (\y.y)) (\z.z)
    t_n = 0; a = mk_app(mk_app(mk_name("x"), id_fun("y")), id_fun("z"));
    e = mk_app(mk_name("x"), id_fun("z"));
    run_test("5", a, e, 1, 40);
    // 6: (\x.x)(\y.yy)
    t_n = 0; a = mk_app(id_fun("x"), mk_fun("y", mk_app(mk_name("y"), mk_name("y"))));
    e = mk_fun("y", mk_app(mk_name("y"), mk_name("y")));
    run_test("6", a, e, 1, 80);
    // 7: (\x.x)(\y.y)(\z.z)
    t_n = 0; a = mk_app(mk_app(id_fun("x"), id_fun("y")), id_fun("z")); e = id_fun("z");
    run_test("7", a, e, 1, 120);
    // 9: (\x.xx)y
    t_n = 0; a = mk_app(mk_fun("x", mk_app(mk_name("x"), mk_name("x"))), mk_name("y"));
    e = mk_app(mk_name("y"), mk_name("y"));
    run_test("9", a, e, 1, 20);
    // twice the copies of test 3, done in parallel: only the one extra tree
    // level of the body (one more Resolve Flag hop) may cost time
    checks++;
    if (last_cycles > c3 + 2) begin
      failures++;
      $display("FAIL test 9 took %0d pulses, test 3 %0d: copies not parallel", last_cycles, c3);
    end
    // 10: (\x.xx)(\y.y)
    t_n = 0; a = mk_app(mk_fun("x", mk_app(mk_name("x"), mk_name("x"))), id_fun("y"));
    e = id_fun("y");
    run_test("10", a, e, 1, 120);
    // GoTo reclaim: (\x.x)(\y.y) with nine GoTo nodes filling the cluster,
    // so the copy can only get its three new nodes from reclaimed GoTos
    t_n = 0;
    a = mk_goto(mk_goto(mk_goto(id_fun("x"))));
    b = mk_goto(mk_goto(mk_goto(mk_goto(mk_goto(mk_goto(id_fun("y")))))));
    a = mk_app(a, b); e = id_fun("y");
    run_test("reclaim", a, e, 1, 80);
    // 8: (\x.x)(\y.y)(\z.z)(\a.a): needs more than 16 nodes
    t_n = 0; a = mk_app(mk_app(mk_app(id_fun("x"), id_fun("y")), id_fun("z")), id_fun("a"));
    e = id_fun("a");
    run_test("8", a, e, 0, 0);
    // 11: (\x.xx)(\y.yy): never reaches a normal form
    t_n = 0; a = mk_app(mk_fun("x", mk_app(mk_name("x"), mk_name("x"))),
                        mk_fun("y", mk_app(mk_name("y"), mk_name("y"))));
    run_test("11", a, a, 0, 0);

    $display("mechanisms: compare=%0d copy_steps=%0d immediate_resolution=%0d branch_chop=%0d nullify=%0d return_expr=%0d goto_reclaim=%0d parallel_copy_cycles=%0d out_of_nodes=%0d timeout=%0d resolve=%0d",
             n_compare, n_copy_steps, n_immres, n_bchop, n_nullify, n_return, n_gotochop,
             n_parallel, n_short, n_timeout, n_reduce);
    begin
      int cnt [11];
      string nm [11];
      cnt = '{n_compare, n_copy_steps, n_immres, n_bchop, n_nullify, n_return,
              n_gotochop, n_parallel, n_short, n_timeout, n_reduce};
      nm = '{"compare", "copy", "immediate_resolution", "branch_chop", "nullify",
             "return_expression", "goto_reclaim", "parallel_copy", "out_of_nodes",
             "timeout", "resolve"};
      for (int i = 0; i < 11; i++) begin
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism %s never happened", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
