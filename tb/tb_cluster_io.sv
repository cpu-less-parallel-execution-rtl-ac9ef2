// tb_cluster_io: runs the setup/readback controller against a small
// behavioural stand-in for a work cluster (a table of nodes that stores
// UpdateExpression writes, answers ReturnExpression with a Mark, puts a
// stray unmarked expression on the root bus otherwise, and raises the
// root Resolve Flag a chosen number of cycles after the last write). Checks
// the order and content of the setup writes, one per clock, the clock-pulse
// count, the readback contents, the nodes-used figure, the time-out and the
// out-of-nodes flag.
`timescale 1ns/1ps
module tb_cluster_io;
  import lambda_pkg::*;
  localparam int unsigned NODES = 16;
  localparam int unsigned AW = $clog2(NODES + 1);
  localparam int unsigned IW = $clog2(NODES);
  localparam int unsigned MAXC = 50;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_we = 0, start = 0;
  logic [IW-1:0] prog_addr = '0, out_addr = '0;
  prog_word_t prog_data = '0;
  logic [AW-1:0] prog_len = '0;
  logic busy, done, timed_out, ran_short;
  logic [31:0] cycles;
  logic [AW-1:0] max_used;
  ebus_t out_data, ext_peb, root_peb;
  ibus_t ext_pib, root_pib;
  logic root_rsf;
  exp_t node_exr [NODES];
  logic exhausted = 0;

  cluster_io #(.NODES(NODES), .MAX_CYCLES(MAXC)) dut (.*);

  // ---- behavioural cluster stand-in ----
  ebus_t mdl [NODES];
  int    writes, since_write, delay;
  prog_word_t seen [NODES];
  always_comb begin
    // Without a Mark the root bus still carries whatever the root routes
    // upward; the reader must ignore it.
    root_peb = '{rsf: 1'b1, exr: EXP_APP, clp: uid_t'(3), crp: uid_t'(4)};
    root_pib = '0;
    if (ext_pib.ins == INS_RETURN_EXP && ext_pib.uni >= 1 && ext_pib.uni <= NODES &&
        mdl[ext_pib.uni - 1].exr != EXP_UNDEF) begin
      root_peb = mdl[ext_pib.uni - 1]; root_pib = '{ins: INS_MARK, uni: '0};
    end
    for (int k = 0; k < NODES; k++) node_exr[k] = mdl[k].exr;
  end
  assign root_rsf = (writes > 0) && (since_write >= delay);
  always @(posedge clk) begin
    since_write <= since_write + 1;
    if (ext_pib.ins == INS_UPDATE_EXP) begin
      mdl[ext_pib.uni - 1] <= ext_peb;
      seen[writes] <= '{uni: ext_pib.uni, e: ext_peb};
      writes <= writes + 1;
      since_write <= 0;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic run(int n, int dly);
    prog_word_t p [NODES];
    for (int k = 0; k < NODES; k++) mdl[k] = '0;
    writes = 0; since_write = 0; delay = dly;
    for (int i = 0; i < n; i++) begin
      p[i].uni = uid_t'(NODES - i);              // any order of IDs
      p[i].e = '{rsf: 1'b0, exr: exp_t'($urandom_range(1, 4)), clp: uid_t'($urandom),
                 crp: uid_t'($urandom)};
      @(negedge clk); prog_we = 1; prog_addr = IW'(i); prog_data = p[i];
    end
    @(negedge clk); prog_we = 0; prog_len = AW'(n); start = 1;
    @(negedge clk); start = 0;
    check(busy, "busy after start");
    wait (done); #1;
    check(writes == n, $sformatf("%0d setup writes, expected %0d", writes, n));
    for (int i = 0; i < n; i++)
      check(seen[i] == p[i], $sformatf("setup write %0d", i));
    if (dly + 1 < MAXC) begin
      // the root flag rises dly cycles after the last write; the count stops there
      check(!timed_out && cycles == 32'(dly), $sformatf("cycles=%0d expected %0d", cycles, dly));
    end else
      check(timed_out && cycles == MAXC, $sformatf("time-out, cycles=%0d", cycles));
    check(32'(max_used) == n, $sformatf("max_used=%0d expected %0d", max_used, n));
    for (int k = 0; k < NODES; k++) begin
      out_addr = IW'(k); #1;
      check(out_data == mdl[k], $sformatf("readback of node %0d", k + 1));
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    run(5, 7);
    run(16, 3);
    run(9, 0);
    run(3, 200);       // never resolves within MAX_CYCLES
    // a request for a node that cannot be served is recorded
    fork
      run(4, 12);
      begin repeat (14) @(posedge clk); exhausted = 1; @(posedge clk); exhausted = 0; end
    join
    check(ran_short, "ran_short recorded");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
