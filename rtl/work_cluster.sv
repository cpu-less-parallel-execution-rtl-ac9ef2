// work_cluster: one work cluster, the unit the original implements: NODES
// nodes, the selector layer / connective bus that wires them into a tree by
// their child pointers, and the new node tracker.
//
// The cluster is reached only through the root node (node 1). The host drives
// the root's parent buses (`ext_peb`, `ext_pib`) and its Irreducible Flag
// (tie `ext_irf` high: nothing above the root can be a Function's argument),
// and sees the root's upward buses and Resolve Flag. Programs are written into
// the nodes with UpdateExpression and read back with ReturnExpression through
// this port, one instruction per clock. When `root_rsf` is high no node of the
// tree can reduce any further.
//
// `node_exr`/`node_rsf` expose every node's expression type and Resolve Flag
// (the per-node display and LED of the original); `exhausted` reports a request
// for a new node that could not be served (the cluster is too small for the
// expression); `reclaim` reports that no Undefined node is left.
//
// Timing: the buses are combinational across the whole tree; all state
// changes at the rising edge of `clk`. `rst_n` is asynchronous, active low,
// and makes every node Undefined.
//
// Circuit note: the node output array feeds the connective bus, which feeds
// the node inputs, so lint tools see a combinational loop here. On the trees
// the nodes build the signals only run parent-to-child or child-to-parent and
// settle within the cycle (see connective_bus and lambda_node).
module work_cluster
  import lambda_pkg::*;
#(
  parameter int unsigned NODES = NODES_DEFAULT
) (
  input  logic  clk,
  input  logic  rst_n,
  input  ebus_t ext_peb,
  input  ibus_t ext_pib,
  input  logic  ext_irf,
  output ebus_t root_peb,
  output ibus_t root_pib,
  output logic  root_rsf,
  output exp_t  node_exr [NODES],
  output logic  node_rsf [NODES],
  output logic  reclaim,
  output logic  exhausted,
  output logic [$clog2(NODES+1)-1:0] n_free
);

  node_out_t  nout [NODES];
  node_in_t   nin  [NODES];
  logic [1:0] nn_req [NODES];
  uid_t       nn_id1 [NODES];
  uid_t       nn_id2 [NODES];

  for (genvar k = 0; k < NODES; k++) begin : g_node
    lambda_node #(
      .UNI  (uid_t'(k + 1)),
      .DEPTH(NODES)
    ) u_node (
      .clk    (clk),
      .rst_n  (rst_n),
      .in     (nin[k]),
      .out    (nout[k]),
      .nn_req (nn_req[k]),
      .nn_id1 (nn_id1[k]),
      .nn_id2 (nn_id2[k]),
      .reclaim(reclaim),
      .exr_o  (node_exr[k]),
      .rsf_o  (node_rsf[k])
    );
  end

  connective_bus #(.NODES(NODES)) u_bus (
    .nout    (nout),
    .nin     (nin),
    .ext_peb (ext_peb),
    .ext_pib (ext_pib),
    .ext_irf (ext_irf),
    .root_peb(root_peb),
    .root_pib(root_pib),
    .root_rsf(root_rsf)
  );

  new_node_tracker #(.NODES(NODES)) u_tracker (
    .clk    (clk),
    .rst_n  (rst_n),
    .exr    (node_exr),
    .req    (nn_req),
    .id1    (nn_id1),
    .id2    (nn_id2),
    .reclaim(reclaim),
    .exhausted  (exhausted),
    .n_free (n_free)
  );

  initial assert (NODES < (1 << ID_W)) else $error("NODES must fit in a node ID");

endmodule
