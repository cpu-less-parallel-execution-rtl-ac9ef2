// tb_connective_bus: random pointer sets (valid and invalid, in and out of
// range) and random bus contents on every node; checks each node's parent
// and child inputs against a reference routing worked out in the testbench:
// a child port follows a valid pointer, a parent port is fed by the lowest
// numbered node pointing at it (its left pointer before its right), node 1's
// parent port is the external port.
`timescale 1ns/1ps
module tb_connective_bus;
  import lambda_pkg::*;
  localparam int unsigned NODES = 16;

  node_out_t nout [NODES];
  node_in_t  nin  [NODES];
  ebus_t ext_peb, root_peb;
  ibus_t ext_pib, root_pib;
  logic  ext_irf, root_rsf;

  connective_bus #(.NODES(NODES)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    for (int n = 0; n < 300; n++) begin
      for (int k = 0; k < NODES; k++) begin
        nout[k] = node_out_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        nout[k].clp = uid_t'($urandom_range(0, NODES + 1));
        nout[k].crp = uid_t'($urandom_range(0, NODES + 1));
      end
      ext_peb = ebus_t'($urandom); ext_pib = ibus_t'($urandom); ext_irf = 1'($urandom);
      #1;
      for (int j = 0; j < NODES; j++) begin
        int p; bit left;
        // children
        if (nout[j].clp_valid && nout[j].clp >= 1 && nout[j].clp <= NODES) begin
          check(nin[j].cle == nout[nout[j].clp - 1].peb && nin[j].cli == nout[nout[j].clp - 1].pib &&
                nin[j].rsf_cl == nout[nout[j].clp - 1].rsf, $sformatf("child left of %0d", j + 1));
        end else check(nin[j].cle == '0 && nin[j].cli == '0 && !nin[j].rsf_cl, "no child left");
        if (nout[j].crp_valid && nout[j].crp >= 1 && nout[j].crp <= NODES) begin
          check(nin[j].cre == nout[nout[j].crp - 1].peb && nin[j].cri == nout[nout[j].crp - 1].pib &&
                nin[j].rsf_cr == nout[nout[j].crp - 1].rsf, $sformatf("child right of %0d", j + 1));
        end else check(nin[j].cre == '0 && nin[j].cri == '0 && !nin[j].rsf_cr, "no child right");
        // parent
        p = -1; left = 0;
        for (int i = 0; i < NODES && p < 0; i++) begin
          if (nout[i].clp_valid && nout[i].clp == j + 1) begin p = i; left = 1; end
          else if (nout[i].crp_valid && nout[i].crp == j + 1) begin p = i; left = 0; end
        end
        if (j == 0)
          check(nin[0].peb == ext_peb && nin[0].pib == ext_pib && nin[0].irf == ext_irf, "root parent port");
        else if (p < 0)
          check(nin[j].peb == '0 && nin[j].pib == '0 && !nin[j].irf, $sformatf("orphan %0d", j + 1));
        else if (left)
          check(nin[j].peb == nout[p].cle && nin[j].pib == nout[p].cli && nin[j].irf == nout[p].irf_cl,
                $sformatf("parent of %0d is %0d left", j + 1, p + 1));
        else
          check(nin[j].peb == nout[p].cre && nin[j].pib == nout[p].cri && nin[j].irf == nout[p].irf_cr,
                $sformatf("parent of %0d is %0d right", j + 1, p + 1));
      end
      check(root_peb == nout[0].peb && root_pib == nout[0].pib && root_rsf == nout[0].rsf, "root out");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
