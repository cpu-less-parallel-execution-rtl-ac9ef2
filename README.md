# A lambda-calculus reducer built from message-passing nodes

This design evaluates untyped lambda calculus directly in logic. It has no
processor, no program counter and no shared memory. A lambda expression is
stored as a tree, one sub-expression per hardware *node*. Each node is a small
state machine that only talks to its parent and its two children. Beta
reduction happens because neighbouring nodes exchange instructions and
expressions on local buses and rewrite their own registers. Every reducible
Function in the tree can work at the same time, so independent reductions
(and the copies they need) run in parallel.

The RTL is one *work cluster* of 16 nodes: a pool of identical nodes, a
selector layer that wires them into a tree by their child pointers, and a
tracker that hands out free nodes when a reduction needs to copy a branch. A
small controller loads an expression through the root node, waits for the
tree to report that it is fully reduced, and reads the result back.

The design follows the architecture published by Fitchett and Fox ("CPU-less
parallel execution of lambda calculus in digital logic"). The original was
built in a schematic simulator. This RTL writes it in synthesizable
SystemVerilog. Where that description is silent or contradicts itself, this
code makes its own choices, and those choices are listed below.

## Expressions as nodes

A node holds exactly one expression. The type is a 3-bit code:

| Code | Type        | Children | Meaning of CLP / CRP                      |
|------|-------------|----------|-------------------------------------------|
| 0    | Undefined   | 0        | free node                                 |
| 1    | GoTo        | 1        | CRP: the node it stands for (a wire)      |
| 2    | Name        | 0        | {CLP, CRP} is the variable's 10-bit value |
| 3    | Application | 2        | CLP: function, CRP: argument              |
| 4    | Function    | 2        | CLP: bound Name, CRP: body                |

Nodes have Unique Node IDs 1..16. ID 0 means "none". Node 1 is the root, and
its parent port is the cluster's external port. For example, `(\x.x) y` takes
five nodes:

    1 App(2,3)   2 Func(4,5)   3 Name y   4 Name x   5 Name x

GoTo nodes appear when a node leaves the tree but its parent cannot yet be
told where to point instead. The node becomes a GoTo to its replacement. In a
result read back from the cluster, a GoTo is a plain wire to its child.

Besides its type and pointers, a node has these registers:

* **RSF** (Resolve Flag): "nothing below me can reduce any more".
* **RDF**: a Name has been matched by its Function and must be replaced.
* **EXB** (expression buffer): the type a Name will take when its copy is done.
* **FSP and BSP**: front and back pointers into a 16-entry local queue of node
  IDs (`node_stack`).
* The phase register of a Function's reduction.
* The pending-chop register of an Application.

## Buses and flags

Every node has a parent side and two child sides, left and right. Each side
carries two buses in each direction:

* an **expression bus** `{RSF, EXR, CLP, CRP}` (PEB from/to the parent,
  CLE and CRE from/to the children);
* an **instruction bus** `{instruction, node ID}` (PIB, CLI, CRI).

Two single-bit flags travel on their own wires beside the buses:

* **Resolve Flag**, going upward:
  * A Name is always resolved.
  * An Application or an irreducible Function is resolved when both of its
    children are.
  * A GoTo copies its child's flag.
  * A Function that can still reduce reports 0.
  * The flag is a register, so it climbs one level per clock. A node that has
    just changed type restarts at 0. The root's flag is the "done" signal.
* **Irreducible Flag**, going downward. It tells a Function that it has no
  argument and must not reduce:
  * The root receives 1.
  * A Function passes 1 to both children.
  * An Application passes 0 to its left child and its own flag to its right
    child.
  * A GoTo passes its own flag on.

The buses are combinational through the tree. An instruction sent by a
Function reaches a Name any number of levels below it in the same clock
cycle, and the Name's answer comes back in that cycle too. All registers
change on the rising edge.

## How each node type routes

* **GoTo** is a transparent wire between its parent and its single child.
* **Name** drives its own expression upward.
* **Application** routes in one of two ways, depending on its Resolve Flag:
  * *Not resolved (cross routing).* The Application connects a Function on
    its left with the argument on its right:

        to parent:      expression from left child,  instruction from right child
        to left child:  expression from right child, instruction from parent
        to right child: expression from parent,      instruction from left child

    A Function therefore sees its argument on its parent expression bus. The
    instructions it sends upward reach the argument, and the argument's
    answers come back to it.
  * *Resolved (broadcast).* The parent's buses go to both children, and the
    two children's instructions are ORed upward. This is the state inside a
    Function body during a reduction: the Function's CompareValue or copy
    instructions must reach every Name in the body.
* **Function** gives its parent's expression bus (its argument) to its body
  (the right child). It gives its left child's expression (the bound Name) to
  the body as the value to compare against. The instructions that drive a
  reduction (CompareValue, Ancestor/Descendant transformation, Immediate
  resolution) are never forwarded into a Function from above. A Function
  therefore protects its body from an outer reduction.

## One beta reduction, step by step

This is the part of the design that takes the most care. In `(\x.B) A`:

* the *Ancestor input* is the root of `A`;
* the *Descendant inputs* are the Names `x` inside `B`.

The Function starts when all of the following hold:

* its Irreducible Flag is low;
* both children are resolved;
* its argument on the parent bus is a resolved Name or Function;
* its left child is a Name.

It then runs three phases.

1. **Compare (1 cycle).** The Function sends CompareValue down its body with
   the bound Name's value. Each Name with that value sets RDF and answers with
   a Mark. The answers are ORed on the way up.
2. **Transfer (one cycle per copied node).** If a Mark came back, the
   Function sends AncestorTransformation up to the argument and
   DescendantTransformation down into the body. The argument's expression
   flows down the connection the Application set up. Each cycle:
   * The Ancestor answers with the expression of the node at the back of its
     queue. It asks for that node with ReturnExpression. It then appends that
     node's children at the front of the queue (FSP grows by 0, 1 or 2) and
     advances BSP.
   * Every marked Descendant does the same walk on its own queue. It gets new
     node IDs from the tracker, writes the received expression into the node
     at the back of its queue (UpdateExpression) with the new children as its
     pointers, and appends those children to its queue.
   * The first node of the walk is the Descendant itself. It keeps its Name
     type until the walk ends and holds the copied type in EXB until then.

   Both queues start with the walker's own ID (FSP = 1, BSP = 0). They walk
   the same shape breadth first, so they stay in step. A Descendant signals a
   Mark in the cycle its queue empties. All marked Descendants copy at the
   same time, fed by one Ancestor walk. `(\x.xx) y` therefore makes its two
   copies in the same cycles as one copy would take.
3. **Resolve (1 cycle).** The Function does three things:
   * sends ImmediateResolution up to its argument;
   * sends Nullify down its left child, removing the bound Name;
   * becomes a GoTo to its body.

   The argument answers ImmediateResolution with BranchChop to its own parent,
   the Application. The Application remembers which child the chop names.
   One cycle later it sends Nullify into that child. Nullify erases a whole
   branch, every node becoming Undefined. The Application then becomes a GoTo
   to the other child.

If no Mark comes back in phase 1, the Function goes straight to phase 3 and
the argument is simply discarded. Names that do not match pass the copy
instructions by. Resolve Flags then climb again from the changed nodes. When
the root's flag rises, the expression is in normal form (or it is stuck, see
the limits below).

The worked example `(x (\y.y)) (\z.z)` is reproduced exactly by
`tb_work_cluster`, with nodes numbered as in the original. The Ancestor's
pointers go FSP 1 to 3 and BSP 1, 2, 3. The result matches the original's
final graph node for node:

* root and the reduced Function are GoTo nodes;
* the Descendant has become `\z` with two fresh nodes holding `z`;
* the Ancestor's branch and the bound Name are Undefined.

## Free nodes and garbage

The **new node tracker** knows which nodes are Undefined. In a single cycle it
serves every node that asks for one or two new nodes. Requests are served in
node order, each from the lowest free IDs. A granted node stays reserved until
it has received its expression. The root is never handed out. If a request
cannot be served, the tracker returns ID 0 and raises `exhausted`. The copy is
then incomplete and the result wrong. The controller reports this as
`ran_short`.

Nullify returns whole branches to the pool. GoTo nodes are only worth
reclaiming when the pool is empty. In that case (`reclaim`), a non-root GoTo
whose buses are idle offers itself to its parent with GoToChop, carrying its
own child pointer. An idle parent takes over the pointer and acknowledges on
the child bus, and the GoTo becomes Undefined. The end-to-end test pads an
expression with nine GoTo nodes to fill the cluster and checks that the
reduction still finishes.

## Loading and reading a cluster

The only way into a cluster is through the root, so `cluster_io` works in four
states:

1. **LOAD.** Writes the program with one UpdateExpression per clock. The
   program is node ID plus expression, with parents before children, so each
   write can travel down the part of the tree already built.
2. **RUN.** Counts clock pulses until the root's Resolve Flag rises, or until
   `MAX_CYCLES` (4096) have passed, which raises `timed_out`.
3. **READ.** Issues ReturnExpression for nodes 1..16 and stores whatever comes
   back with a Mark. A node outside the tree stores as Undefined.
4. **DONE.** The result can be read at `out_addr`/`out_data`. Address k holds
   node k+1.

`cycles` counts the RUN pulses. `max_used` is the largest number of nodes in
use in any cycle.

## Results

All expressions of the original's validation table were run on the default
16-node cluster (`tb_lambda_top`):

| # | Expression                    | Result here       | Pulses here | Nodes here | Original: pulses / nodes |
|---|-------------------------------|-------------------|-------------|------------|--------------------------|
| 1 | `x`                           | `x`               | 1           | 1          | 0 / 1                    |
| 2 | `xxxx`                        | `xxxx`            | 4           | 7          | 0 / 7                    |
| 3 | `(\x.x)y`                     | `y`               | 7           | 5          | 8 / 5                    |
| 4 | `(\x.y)(\z.z)`                | `y`               | 7           | 7          | 23 / 7                   |
| 5 | `x(\y.y)(\z.z)`               | `x(\z.z)`         | 12          | 11         | 23 / 9                   |
| 6 | `(\x.x)(\y.yy)`               | `\y.yy`           | 15          | 13         | 61 / 13                  |
| 7 | `(\x.x)(\y.y)(\z.z)`          | `\z.z`            | 20          | 13         | 78 / 13                  |
| 8 | `(\x.x)(\y.y)(\z.z)(\a.a)`    | fails, too few nodes | time-out | 16         | fails, >16 nodes         |
| 9 | `(\x.xx)y`                    | `yy`              | 9           | 7          | 8 / 7                    |
| 10| `(\x.xx)(\y.y)`               | `\y.y`            | 22          | 13         | 78 / 13                  |
| 11| `(\x.xx)(\y.yy)`              | never ends        | time-out    | 16         | never ends               |

The reduced expressions agree with the original in every case, including its
two failures. The clock counts are not meant to match. The original's timing
inside a node is not described in enough detail to reproduce. Here a bus
settles within one cycle, a copy moves one node per cycle, and the Resolve
Flag climbs one level per cycle. Pulses here run from the end of loading until
the root flag rises, so even an expression with nothing to reduce takes one
pulse. The copies run in parallel as in the original: test 9 makes two
copies where test 3 makes one, and their copy phases take the same number of
cycles. Test 9 still takes two pulses more in total, because its result
`yy` is an Application whose Resolve Flag has one more level to climb. For test 5 the node count is higher than the original's (11 against
9). Here the two new nodes of the copy exist before the argument and the
bound Name are removed.

## Where this RTL departs from the original description

* **Application routing.** The original's routing table lists the resolved
  and unresolved cases the other way round from its prose and its routing
  figure. The prose and the figure are followed, because the other way a
  Function could never reach its argument.
* **Removing the argument.** One passage says the argument leaves with
  GoToChop, another (and the figures) with BranchChop. BranchChop is used.
  As in the original, the Application compares the ID that comes with
  BranchChop against its two pointers and chops the matching child. If
  neither pointer matches, because a GoTo sits in between, it chops the side
  the instruction arrived from. That fallback is this design's own.
* **Pseudocode slips fixed.** UpdateChildLeft writes the left pointer and
  UpdateChildRight the right one; the pseudocode has them swapped. The
  ReturnExpression of a right child returns the right child's expression.
* **The flags travel on separate wires.** The original places the Resolve
  Flag in the expression bus. A routing node forwards other nodes'
  expressions on that bus, so it cannot also carry its own flag there.
* **Own choices where the original is silent:**
  * the bit encodings of types and instructions;
  * 5-bit node IDs and 10-bit Name values;
  * queue depth 16;
  * the flag rules for Function and GoTo and the flag reset on a type change;
  * the tracker's priority and reservation;
  * the GoTo reclaim handshake;
  * the controller's states and the `MAX_CYCLES` time-out;
  * asynchronous active-low reset to Undefined.

## Limits

These limits are inherited from the architecture:

* **No nested substitution.** Reduction instructions never enter a Function
  from above. In `(\x.\y.x) a` the compare cannot see the inner `x`, so the
  argument is dropped and the result is `\y.x` instead of `\y.a`. The
  original states the same rule for its Functions.
* **Restricted arguments.** An argument must be a Name or a Function. An
  Application or GoTo as argument is not reduced.
* **Out of nodes.** A cluster that runs out of free nodes keeps going with
  broken copies rather than stalling. `ran_short` and `exhausted` flag this.
* **Single cluster only.** The larger hierarchy is not built. The original
  sketches clusters joined root to root into super-clusters, but gives no
  design for it.

## Structure and interfaces

    lambda_top
    ├── cluster_io          loader / run counter / readback, input and output RAMs
    └── work_cluster        16 nodes + wiring + tracker
        ├── lambda_node ×16 one expression per node (UNI = 1..16)
        │   └── node_stack  16-entry ID queue for copying
        ├── connective_bus  selector layer: pointers -> bus connections
        └── new_node_tracker

`lambda_pkg` holds the shared types: `exp_t`, `ins_t`, `ebus_t`, `ibus_t`,
`prog_word_t`, and the per-node port bundles `node_in_t` and `node_out_t`.
Each file opens with a description of its interface and timing.

The top's host interface works like this:

1. Write `prog_len` words with `prog_we`/`prog_addr`/`prog_data`.
2. Pulse `start`.
3. Wait for `done`.
4. Read `out_data` at `out_addr`, together with `cycles`, `max_used`,
   `timed_out` and `ran_short`.

The top also exports every node's type and Resolve Flag, and the tracker's
`n_free` and `reclaim`.

Because every node's outputs are routed to every other node's inputs, lint
tools report a combinational loop through the node buses. On any tree the
nodes build, signals only run between parent and child, so the loop never
closes.

Each block synthesizes on its own with yosys. A single node comes to about
480 cells, 34 flip-flop bits and an 80-bit queue RAM. The 16-input tracker is
about 3600 cells. Coarse synthesis of the whole cluster stops at the loop
above, so no size is given for the full design. Static timing is not
analysed either. The longest path is a chain of bus hops from a Function to
the deepest Name and back, so it grows with the depth of the tree.

## Simulating

Every block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With
verilator 5, for example:

    verilator --binary --timing --assert -Irtl -y rtl rtl/lambda_pkg.sv \
              tb/tb_lambda_top.sv --top-module tb_lambda_top -o sim
    ./obj_dir/sim

| Testbench              | What it checks                                                                                       |
|------------------------|------------------------------------------------------------------------------------------------------|
| `tb_lambda_pkg`        | the shared encodings, bus widths and child counts                                                    |
| `tb_node_stack`        | the queue RAM against an array model                                                                 |
| `tb_new_node_tracker`  | random node states and requests against a reference allocator                                        |
| `tb_connective_bus`    | random pointer sets against a reference routing                                                      |
| `tb_lambda_node`       | one node through every type and instruction, with expected values worked out by hand                 |
| `tb_cluster_io`        | the controller against a behavioural cluster stand-in                                                |
| `tb_work_cluster`      | the worked example above, including stack pointers and the final graph                               |
| `tb_lambda_top`        | all eleven expressions at default size, plus the GoTo-reclaim case; counts each mechanism and fails if one never occurs |

`tb_lambda_top` builds the expected normal form itself. It compares results
as printed terms, for example `((\x.x) y) -> y`.
