// node_stack: the small local RAM that each node owns for graph copying.
//
// During a beta reduction the node that supplies the argument (the "Ancestor
// input") and every node that receives a copy of it (the "Descendant inputs")
// walk a branch breadth first. Each keeps a list of Unique Node IDs: the back
// stack pointer (BSP, kept in the node) selects the ID handled this cycle, and
// the IDs of the children of the node just handled are appended at the front
// stack pointer (FSP). The list therefore behaves as a queue that never wraps:
// a walk starts at FSP = 1, BSP = 0 and ends when BSP reaches FSP.
//
// The original stores the list in a RAM outside the node; this RAM has one
// asynchronous read port and two write ports, because one step may append
// two IDs (Algorithm 8 writes X and Y in the same step). Port 1 writes at
// waddr, port 2 at waddr + 1. A single write uses port 1 only. Writes take
// effect at the rising clock edge; the read is combinational.
//
// DEPTH defaults to the cluster size: a branch cannot hold more nodes than the
// cluster, so the list never overflows. The original does not give the RAM size.
module node_stack
  import lambda_pkg::*;
#(
  parameter int unsigned DEPTH = NODES_DEFAULT,
  localparam int unsigned AW   = $clog2(DEPTH + 1),
  localparam int unsigned IW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we1,
  input  logic          we2,
  input  logic [AW-1:0] waddr,
  input  uid_t          wdata1,
  input  uid_t          wdata2,
  input  logic [AW-1:0] raddr,
  output uid_t          rdata
);

  uid_t mem [DEPTH];

  logic [AW-1:0] waddr2;
  assign waddr2 = waddr + 1'b1;

  always_ff @(posedge clk) begin
    if (we1 && 32'(waddr) < DEPTH)  mem[waddr[IW-1:0]]  <= wdata1;
    if (we2 && 32'(waddr2) < DEPTH) mem[waddr2[IW-1:0]] <= wdata2;
  end

  assign rdata = (32'(raddr) < DEPTH) ? mem[raddr[IW-1:0]] : '0;

endmodule
