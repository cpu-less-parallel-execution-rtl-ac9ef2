// cluster_io: setup and readback logic around a work cluster, the "input RAM,
// output RAM and supporting logic" of the original.
//
// Operation: the host writes a program into the input RAM (one prog_word_t per
// node: node ID plus the expression to store there, parents before children
// so that every write can travel down the tree already built), sets
// `prog_len` and pulses `start`. The block then
//   1. LOAD: sends one UpdateExpression per clock into the root's parent port,
//      prog_len cycles (the only way into a cluster is through its root);
//   2. RUN: counts clock pulses until the root's Resolve Flag is raised, or
//      until MAX_CYCLES have passed (`timed_out`, e.g. for an expression
//      that never stops reducing);
//   3. READ: sends ReturnExpression for node 1..NODES, one per clock, and
//      stores what comes back at the root into the output RAM (all zero, i.e.
//      Undefined, for a node that is not part of the tree);
//   4. DONE: raises `done` until the next `start`.
// `cycles` is the number of RUN clock pulses (the "Clock Pulses" of the
// original's results, which exclude setup and readback) and `max_used` the
// largest number of non-Undefined nodes seen in any cycle ("Nodes Used").
// `ran_short` records that the new node tracker could not serve a request.
//
// The output RAM is read asynchronously through `out_addr`/`out_data`
// (address k holds node k+1). The original loads its input RAM from a file in
// the simulator; here the host writes it. The state machine and MAX_CYCLES
// are this design's own.
//
// Lint note: the node ID field of the root's upward instruction bus is not
// used; readback only needs to know that a Mark came back.
module cluster_io
  import lambda_pkg::*;
#(
  parameter int unsigned NODES      = NODES_DEFAULT,
  parameter int unsigned MAX_CYCLES = 4096,
  localparam int unsigned AW        = $clog2(NODES + 1),
  localparam int unsigned IW        = (NODES > 1) ? $clog2(NODES) : 1
) (
  input  logic       clk,
  input  logic       rst_n,
  // host side
  input  logic       prog_we,
  input  logic [IW-1:0] prog_addr,
  input  prog_word_t prog_data,
  input  logic [AW-1:0] prog_len,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic       timed_out,
  output logic       ran_short,
  output logic [31:0] cycles,
  output logic [AW-1:0] max_used,
  input  logic [IW-1:0] out_addr,
  output ebus_t      out_data,
  // cluster side
  output ebus_t      ext_peb,
  output ibus_t      ext_pib,
  input  ebus_t      root_peb,
  input  ibus_t      root_pib,
  input  logic       root_rsf,
  input  exp_t       node_exr [NODES],
  input  logic       exhausted
);

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_READ, S_DONE} state_t;

  prog_word_t    in_ram  [NODES];
  ebus_t         out_ram [NODES];
  state_t        state;
  logic [AW-1:0] idx;
  logic [AW-1:0] used;

  always_comb begin
    used = '0;
    for (int k = 0; k < NODES; k++)
      used += AW'(node_exr[k] != EXP_UNDEF);
  end

  always_comb begin
    ext_peb = '0;
    ext_pib = '0;
    unique case (state)
      S_LOAD: begin
        ext_peb = in_ram[idx[IW-1:0]].e;
        ext_pib = '{ins: INS_UPDATE_EXP, uni: in_ram[idx[IW-1:0]].uni};
      end
      S_READ:  ext_pib = '{ins: INS_RETURN_EXP, uni: uid_t'(idx + 1'b1)};
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (prog_we) in_ram[prog_addr] <= prog_data;
    if (state == S_READ)
      out_ram[idx[IW-1:0]] <= (root_pib.ins == INS_MARK) ? root_peb : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      cycles    <= '0;
      max_used  <= '0;
      timed_out <= 1'b0;
      ran_short <= 1'b0;
    end else begin
      if (state inside {S_LOAD, S_RUN} && used > max_used) max_used <= used;
      if (state == S_RUN && exhausted) ran_short <= 1'b1;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          state     <= (prog_len == '0) ? S_RUN : S_LOAD;
          idx       <= '0;
          cycles    <= '0;
          max_used  <= '0;
          timed_out <= 1'b0;
          ran_short <= 1'b0;
        end
        S_LOAD: begin
          idx <= idx + 1'b1;
          if (idx + 1'b1 == prog_len) state <= S_RUN;
        end
        S_RUN: begin
          if (root_rsf) begin
            state <= S_READ; idx <= '0;
          end else if (cycles + 1 >= MAX_CYCLES) begin
            cycles <= cycles + 1; timed_out <= 1'b1;
            state <= S_READ; idx <= '0;
          end else begin
            cycles <= cycles + 1;
          end
        end
        S_READ: begin
          idx <= idx + 1'b1;
          if (32'(idx) + 1 == NODES) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = state inside {S_LOAD, S_RUN, S_READ};
  assign done     = (state == S_DONE);
  assign out_data = out_ram[out_addr];

endmodule
