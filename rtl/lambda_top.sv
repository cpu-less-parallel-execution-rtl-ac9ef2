// lambda_top: a complete lambda-calculus reducer: one work cluster of NODES
// nodes with its setup/readback logic.
//
// The host loads an expression graph (one prog_word_t per node, parents
// first), pulses `start`, waits for `done` and reads the reduced graph back
// from the output RAM: word k is the expression held by node k+1. GoTo nodes
// in the result are to be read as plain wires to their (right) child. The
// reduction itself runs in parallel inside the cluster, with no processor and
// no shared memory: each node only exchanges messages with its parent and
// children.
//
// Reported: `cycles` (clock pulses from the end of setup until the root's
// Resolve Flag rose), `max_used` (largest number of nodes in use), `timed_out`
// (no result within MAX_CYCLES), `ran_short` (the cluster ran out of Undefined
// nodes during a copy, so the result may be corrupt), and every node's
// expression type and Resolve Flag, `n_free` (Undefined nodes available) and
// `reclaim` (none left, GoTo nodes are being given back).
module lambda_top
  import lambda_pkg::*;
#(
  parameter int unsigned NODES      = NODES_DEFAULT,
  parameter int unsigned MAX_CYCLES = 4096,
  localparam int unsigned AW        = $clog2(NODES + 1),
  localparam int unsigned IW        = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          prog_we,
  input  logic [IW-1:0] prog_addr,
  input  prog_word_t    prog_data,
  input  logic [AW-1:0] prog_len,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          timed_out,
  output logic          ran_short,
  output logic [31:0]   cycles,
  output logic [AW-1:0] max_used,
  input  logic [IW-1:0] out_addr,
  output ebus_t         out_data,
  output exp_t          node_exr [NODES],
  output logic          node_rsf [NODES],
  output logic          reclaim,
  output logic [AW-1:0] n_free
);

  ebus_t ext_peb, root_peb;
  ibus_t ext_pib, root_pib;
  logic  root_rsf, exhausted;

  cluster_io #(.NODES(NODES), .MAX_CYCLES(MAX_CYCLES)) u_io (
    .clk, .rst_n,
    .prog_we, .prog_addr, .prog_data, .prog_len, .start,
    .busy, .done, .timed_out, .ran_short, .cycles, .max_used,
    .out_addr, .out_data,
    .ext_peb, .ext_pib, .root_peb, .root_pib, .root_rsf,
    .node_exr, .exhausted
  );

  work_cluster #(.NODES(NODES)) u_cluster (
    .clk, .rst_n,
    .ext_peb, .ext_pib,
    .ext_irf (1'b1),
    .root_peb, .root_pib, .root_rsf,
    .node_exr, .node_rsf,
    .reclaim, .exhausted, .n_free
  );

endmodule
