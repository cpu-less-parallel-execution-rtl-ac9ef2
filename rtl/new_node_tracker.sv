// new_node_tracker: hands out Undefined nodes to the nodes that are building
// a copy of a branch, several requests in the same clock cycle.
//
// A node is free when its expression type is Undefined, it is not the root
// (node 1, whose parent port is the cluster's external port) and it has not
// already been handed out. Each cycle every node may ask for 0, 1 or 2 new
// nodes (`req`); requests are served in node order, each with the lowest free
// IDs, so all IDs granted in one cycle are distinct. The answer is
// combinational (`id1`, `id2`, same cycle). A granted node stays reserved
// until it has been given an expression, so it cannot be handed out twice.
// When no free node is left for a request the ID is 0 (NULL) and `exhausted`
// is raised; `reclaim` is raised whenever no free node exists at all, which
// is when GoTo nodes should give themselves back.
//
// The original names this part (NewNodeTracker; version 2 serves several
// requests per cycle) without giving its insides: the priority order, the
// reservation and the two flags are this design's own.
module new_node_tracker
  import lambda_pkg::*;
#(
  parameter int unsigned NODES = NODES_DEFAULT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  exp_t       exr   [NODES],
  input  logic [1:0] req   [NODES],
  output uid_t       id1   [NODES],
  output uid_t       id2   [NODES],
  output logic       reclaim,
  output logic       exhausted,
  output logic [$clog2(NODES+1)-1:0] n_free
);

  logic [NODES-1:0] reserved, free0, avail, granted;
  logic             found;

  always_comb begin
    for (int k = 0; k < NODES; k++)
      free0[k] = (exr[k] == EXP_UNDEF) && !reserved[k] && (k != 0);
    avail   = free0;
    granted = '0;
    exhausted = 1'b0;
    found     = 1'b0;
    for (int i = 0; i < NODES; i++) begin
      id1[i] = '0;
      id2[i] = '0;
      for (int n = 0; n < 2; n++) begin
        if (32'(req[i]) > n) begin
          found = 1'b0;
          for (int k = 0; k < NODES; k++) begin
            if (!found && avail[k]) begin
              found      = 1'b1;
              avail[k]   = 1'b0;
              granted[k] = 1'b1;
              if (n == 0) id1[i] = uid_t'(k + 1);
              else        id2[i] = uid_t'(k + 1);
            end
          end
          if (!found) exhausted = 1'b1;
        end
      end
    end
    reclaim = (free0 == '0);
    n_free  = '0;
    for (int k = 0; k < NODES; k++) n_free += $clog2(NODES+1)'(free0[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) reserved <= '0;
    else
      for (int k = 0; k < NODES; k++)
        reserved[k] <= (reserved[k] | granted[k]) && (exr[k] == EXP_UNDEF);
  end

endmodule
