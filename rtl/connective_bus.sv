// connective_bus: the selector layer and shared connective bus of one work
// cluster. It turns the child pointers stored in the nodes into bus
// connections, so that the tree drawn by the pointers becomes a tree of wires.
//
// Every node has one parent port and two child ports. A child port of node i
// is joined to node CLP(i) or CRP(i) when the node marks that pointer valid
// (a Name's pointer fields hold its value and are not routed). The parent port
// of node j is joined to the child port of whichever node points at j; the
// lowest-numbered such node wins if, through an error, two do. Node 1 is the
// root: its parent port is the cluster's external port. A node that nobody
// points at (an Undefined node, or a branch that has just been cut off) sees
// empty buses on its parent port.
//
// The layer is purely combinational. Node IDs are 1..NODES; node j sits at
// array index j-1.
//
// The original builds this from one selector per node and a fully connected
// bus inside the cluster (every node can reach every other); the exact
// multiplexer structure is this design's own.
//
// Circuit note: because every node's outputs are routed back to the inputs of
// other nodes, lint tools see a combinational loop through this block. For any
// graph that is a tree the data never travel round a cycle: the buses only run
// from a node to its parent or children, and each node's outputs depend on the
// inputs from one side only (see lambda_node).
module connective_bus
  import lambda_pkg::*;
#(
  parameter int unsigned NODES = NODES_DEFAULT
) (
  input  node_out_t nout [NODES],
  output node_in_t  nin  [NODES],
  // external side of the root node's parent port
  input  ebus_t     ext_peb,
  input  ibus_t     ext_pib,
  input  logic      ext_irf,
  output ebus_t     root_peb,
  output ibus_t     root_pib,
  output logic      root_rsf
);

  // child side: follow the pointers downwards
  always_comb begin
    for (int i = 0; i < NODES; i++) begin
      nin[i].cle    = '0;
      nin[i].cli    = '0;
      nin[i].rsf_cl = 1'b0;
      nin[i].cre    = '0;
      nin[i].cri    = '0;
      nin[i].rsf_cr = 1'b0;
      for (int k = 0; k < NODES; k++) begin
        if (nout[i].clp_valid && 32'(nout[i].clp) == k + 1) begin
          nin[i].cle    = nout[k].peb;
          nin[i].cli    = nout[k].pib;
          nin[i].rsf_cl = nout[k].rsf;
        end
        if (nout[i].crp_valid && 32'(nout[i].crp) == k + 1) begin
          nin[i].cre    = nout[k].peb;
          nin[i].cri    = nout[k].pib;
          nin[i].rsf_cr = nout[k].rsf;
        end
      end
    end
  end

  // parent side: find the node that points at j
  always_comb begin
    for (int j = 0; j < NODES; j++) begin
      nin[j].peb = '0;
      nin[j].pib = '0;
      nin[j].irf = 1'b0;
      if (j == 0) begin
        nin[j].peb = ext_peb;
        nin[j].pib = ext_pib;
        nin[j].irf = ext_irf;
      end else begin
        for (int i = NODES - 1; i >= 0; i--) begin
          if (nout[i].crp_valid && 32'(nout[i].crp) == j + 1) begin
            nin[j].peb = nout[i].cre;
            nin[j].pib = nout[i].cri;
            nin[j].irf = nout[i].irf_cr;
          end
          if (nout[i].clp_valid && 32'(nout[i].clp) == j + 1) begin
            nin[j].peb = nout[i].cle;
            nin[j].pib = nout[i].cli;
            nin[j].irf = nout[i].irf_cl;
          end
        end
      end
    end
  end

  assign root_peb = nout[0].peb;
  assign root_pib = nout[0].pib;
  assign root_rsf = nout[0].rsf;

endmodule
