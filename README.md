# A lambda-calculus reduction cluster with lists and arithmetic

This is RTL for a processor-less way of running functional programs. There is
no instruction stream. A program, written as a lambda expression, is parsed
into a tree, and each expression of the tree is loaded into its own small
hardware *node*. Nodes are wired to their parent and two children, and they
reduce the program together by passing messages. No node can compute anything
alone, but a cluster of them reduces whole expressions.

Pure lambda calculus is a poor fit for hardware. The Church numeral for 2,
applied to the successor function, already takes about twenty nodes, and
`127 + 127` would take over a thousand. This design adds two kinds of
primitive to the node:

* **lists**. A chain of list nodes acts as an indexed container. Only the item
  at the *activated depth* is connected to the rest of the graph. The other
  items stay suspended.
* **arithmetic**. `Add` and `Mult` work on 8-bit names. `GreatZero`,
  `LessZero` and `EqualZero` pick one of two branches by comparing a value with
  zero. Every cluster has one **shared ALU** with a queue of requests, so
  nodes do not need their own adders or multipliers.

The design follows a published architecture that extends an earlier node
design. That earlier design (functions and beta reduction) is not described
in enough detail to build, so it is not here. What is built is everything the
extension needs to run its own test expressions:

* Name, Application and GoTo nodes;
* list nodes with all four list instructions;
* the five arithmetic nodes;
* the cluster ALU;
* the node interconnect and a node allocator.

## Files

| file | what it is |
|---|---|
| `rtl/lambda_pkg.sv` | widths, bus structs, expression / instruction / ALU codes |
| `rtl/lambda_node.sv` | one node: registers, routing by expression type, list and arithmetic behaviour |
| `rtl/depth_adder.sv` | the list node's depth incrementer |
| `rtl/cluster_alu.sv` | shared ALU with its request stack |
| `rtl/node_allocator.sv` | hands out free nodes (used by AddBottomNode) |
| `rtl/cluster_interconnect.sv` | connects nodes according to their child pointers |
| `rtl/lambda_cluster.sv` | top: 16 nodes, interconnect, allocator, ALU arbiter, cluster ALU |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_lambda_cluster` runs the whole design |

## The node

A node stores five values:

| register | width | meaning |
|---|---|---|
| `exp` | 4 | expression type |
| `rsf` | 1 | Resolve Flag: nothing left to compute below this node. A list node uses it as its *active* flag. |
| `rdf` | 1 | Irreducible Flag: the branch depends on an input that does not exist (for example, a comparison with no ancestor) |
| `clp`, `crp` | 4 + 4 | left and right child pointers (node IDs). A Name keeps its 8-bit value here instead, as `{clp, crp}`. |

Node IDs are 4 bits and a cluster has 16 nodes. ID 0 also means "no child"
(NULL), so nothing can point at node 0. Node 0 is therefore always the root
of the loaded graph.

Each node has two buses to its parent and two to each child, and each bus
has an input and an output half:

* **instruction bus** (`PIB` on the parent side, `CLI` and `CRI` on the child
  sides): `{key[3:0], uni[3:0]}`. `uni` is a target node ID or a target list
  depth. Coming up from a list node, it carries that list's depth + 1.
* **expression bus** (`PEB`, `CLE`, `CRE`): `{rsf, rdf, clp, crp}`, which is
  a node's contents.

**Timing.** All of a node's output buses are registered. A message therefore
moves one node per clock, in both directions. The interconnect between nodes
is combinational and has no loops: every path from one node to another goes
through a flip-flop. Register contents change on the clock edge after the
inputs that cause the change. A transformation that both sends a message to a
child and changes the node's pointers takes two cycles. In the first cycle
the message is sent along the old pointer. In the second cycle the pointer
changes.

### What each expression type does

| type | parent side | children |
|---|---|---|
| Name | PEB = `{1, 0, value}` | none |
| GoTo | passes PIB/PEB straight through to and from the right child | right only |
| Application | PEB = `{both children resolved, rdf, clp, crp}` | passes the parent's instructions to both children. Gives the right child's (the argument's) expression to the left child as its *ancestor input*. When ImmediateResolution comes up from the left child, it nullifies the argument and becomes a GoTo to the left child. |
| List, inactive (`rsf=0`) | PIB = `{right child's key, depth+1}`, PEB = right child's PEB | right child gets the parent's PIB and PEB; the item (left child) is cut off |
| List, active (`rsf=1`) | PIB = `{item's key, depth+1}`, PEB = item's PEB | left child (the item) gets the parent's PIB and PEB; the rest of the list is cut off |
| Add, Mult | nothing | see below |
| GreatZero / LessZero / EqualZero | nothing if reducible; `{both resolved, 1, clp, crp}` if irreducible | see below |
| Function | reports its contents | not reduced (beta reduction not built) |
| Empty | nothing | free for the allocator |

These instructions act on any node that receives them on its parent bus:

* **Nullification**: the node sends Nullification on to its children, then
  empties itself one cycle later. A whole discarded subtree is freed this
  way, one level per cycle.
* **UpdateExpression**: the node takes its expression type from the `uni`
  field and its flags and pointers from the PEB.
* **UpdateChildLeft / UpdateChildRight**: these act only on the node whose ID
  is in the `uni` field. That node copies `clp` (or `crp`) from the PEB.
  Other nodes route them like any other instruction. They let the host
  re-point a branch, for example one branch of an irreducible comparison.

## Lists

A list `a, b, c` is a right-leaning chain of list nodes. The last item added
is at the top:

```
 (γ² c.(γ¹ b.(γ⁰ a.∅)))      node0: List  clp→c  crp→node1      depth 2
                             node1: List  clp→b  crp→node2      depth 1
                             node2: List  clp→a  crp=NULL       depth 0
```

**Depth.** A node's *depth* is the number of list nodes below it. No node
stores its depth. Each list node reads its depth from the `uni` field its
right child sends up (0 if the right pointer is NULL). It adds one with its
local `depth_adder` and sends the result up on its own PIB. A chain of n list
nodes settles n cycles after it is built or changed.

**Activity.** Exactly one list node should be active. An inactive list node
links its parent to the rest of the chain. The active one links its parent to
its item. So the node above the list sees the item at the activated depth as
if it were its direct child. The other items are suspended and receive no
instructions from above. Activating a depth the list does not have leaves no
node active, which suspends every item at once. The top-level test checks
this.

Instructions, sent down the chain from the top (every list node passes them
on to its right child):

| instruction | `uni` | action |
|---|---|---|
| ActivateDepth | target depth | every list node sets `rsf = (depth == target)` |
| UpdateDepth | target depth | the list node at the target depth sets `clp` to the `clp` on the PEB, which travels down in step with the instruction |
| AddBottomNode | – | the tail (depth 0) asks the allocator for a free node and points `crp` at it (cycle 1). Next cycle it sends UpdateExpression(List) to the new node, with the item pointer that came with the instruction on PEB. The new node becomes the tail and every depth above goes up by one. |
| RemoveBottomNode | – | the depth-1 node sends Nullification to the tail (cycle 1), which frees the tail and its item. Next cycle it clears `crp`. |

Together, AddBottomNode and RemoveBottomNode make a list behave like a stack.

## Arithmetic

**Add, Mult.** The node waits until both children report `rsf` (both are
Names with values). It then puts a request `{own ID, op, left value, right
value}` to the cluster ALU. When the ALU's result arrives with its ID, the
node nullifies both children and turns into a Name holding the 8-bit result.
Results wrap at 8 bits: `127+127` gives `0xFE`, and `100*3` gives `0x2C`.

**Comparisons to zero.** These need a third input, the *ancestor*: the
argument of the application directly above them. The application passes the
argument's expression down as the comparison's PEB input, so the comparison
expression is written `Application(Cmp(branch1, branch2), x)`.

A reducible comparison (`rdf=0`) waits only for its ancestor to be resolved.
It does not wait for either branch to finish. It then asks the ALU for the
comparison of x with zero:

* **true**: it nullifies the right branch and becomes a GoTo to the left
  branch;
* **false**: it nullifies the left branch and becomes a GoTo to the right
  branch.

In both cases it sends ImmediateResolution up. The application then nullifies
the argument and becomes a GoTo itself. The root ends up reading the chosen
branch through two GoTo nodes.

A comparison loaded with `rdf=1` has no ancestor. It behaves like an
irreducible function: it raises `rsf` once both branches are resolved and
reports its contents upward. All arithmetic nodes pass CompareValue and
DescendantTransformation on to both children, together with the PEB that came
with them, so that a function reduction
above them could reach names inside either branch. That function reduction
itself is not built.

### The cluster ALU

`cluster_alu` is a stack of DEPTH request registers (16 by default, one per
node) in front of a combinational ALU.

* **Push.** A request (`req_valid_i`) shifts every register down one place
  and writes the new request on top.
* **Process.** On a cycle with no new request, the top entry is evaluated.
  On that clock edge the result, the requester's ID and a one-cycle `valid`
  (the ALU's *status*) are registered, and the stack shifts up.

Two consequences follow:

* Requests are served **last-in first-out**.
* **Processing waits while requests keep arriving.** A lone request is
  answered on the clock edge after the one that accepted it.

The cluster broadcasts the result; the node whose ID matches takes it. The
stack has one D input, so `lambda_cluster` puts a fixed-priority arbiter in
front of it (lowest node ID first). A node that loses keeps its request raised.

## Using the cluster

There is no loader in hardware. The host writes each node's five values
through `cfg_we_i / cfg_id_i / cfg_state_i`, one node per clock. Writing a
node also resets its internal phase. The host acts as node 0's parent:

* **Instructions in.** Pulse an instruction on `host_pib_i` for one cycle.
  Where the instruction carries data (UpdateDepth, AddBottomNode), drive that
  data on `host_peb_i` in the same cycle.
* **Result out.** The reduced result is node 0's expression on `host_peb_o`.
  For example, after `Add(1,1)` reduces it reads `{rsf=1, rdf=0, value=2}`.
  `node_state_o` shows every node's registers.

Loading `Add(Name 1, Name 1)`:

```
node 0: {exp=ADD(6),  rsf=0, rdf=0, clp=1, crp=2}
node 1: {exp=NAME(1), rsf=1, rdf=0, clp=0, crp=1}     // value 0x01
node 2: {exp=NAME(1), rsf=1, rdf=0, clp=0, crp=1}
```

Codes (all in `lambda_pkg`):

* **Expressions**: Empty 0, Name 1, Function 2, Application 3, GoTo 4,
  List 5, Add 6, Mult 7, GreatZero 8, LessZero 9, EqualZero 10.
* **Instructions**: None 0, Nullification 1, ReturnExpression 2,
  UpdateExpression 3, UpdateChildLeft 4, UpdateChildRight 5,
  ImmediateResolution 6, AncestorTransformation 7, CompareValue 8,
  DescendantTransformation 9, ActivateDepth 10, UpdateDepth 11,
  AddBottomNode 12, RemoveBottomNode 13.
* **ALU ops**: ADD 0, MUL 1, GTZ 2, LTZ 3, EQZ 4.

Only ReturnExpression = 2 comes from the source. The other codes were chosen
for this design.

## Measured behaviour

From `tb_lambda_cluster`, counting clock cycles from the last configuration
write to the root reporting the result:

| expression | nodes | result | cycles |
|---|---|---|---|
| `Add(1,1)` | 3 | 2 | 6 |
| `Mult(3,3)` | 3 | 9 | 6 |
| `Add(Add(1,1),Add(1,1))` | 7 | 4 | 12 (two ALU requests meet in the stack) |
| `App(Cmp(a,b), x)`, all three comparisons, true and false | 5 | a or b | 8 |
| 5-item list, ActivateDepth 0/1/3/4 | 10 | items a, b, d, e | settles within 16 |

The reference implementation reports 16 ticks for a single operation and 48
for the nested addition, on its own and different timing. The testbench uses
those numbers only as upper bounds. Every graph above fits easily in a
16-node cluster. Its graphs that start by applying a function (`(λf.f)` to a
list, or list items that are functions) cannot run here, because beta
reduction is not built. Their pure-lambda equivalents need 23 to 145 nodes
and would not fit in one cluster anyway.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/lambda_pkg.sv tb/tb_lambda_cluster.sv \
          --top-module tb_lambda_cluster
./obj_dir/Vtb_lambda_cluster
```

Other testbenches are built the same way: `tb_lambda_node`, `tb_cluster_alu`,
`tb_node_allocator`, `tb_cluster_interconnect` and `tb_depth_adder`.
Verilator finds the modules through `-Irtl`. `tb_lambda_cluster` runs the
design at its default size: 16 nodes and a 16-entry ALU stack. It takes well
under a second. In that run it checks that every mechanism happened at least
once:

* requests stacking in the ALU;
* ALU results returning to their nodes;
* nullification;
* GoTo transformations;
* ImmediateResolution;
* ActivateDepth and UpdateDepth;
* node allocation;
* RemoveBottomNode;
* irreducible comparison;
* CompareValue forwarded through an arithmetic node;
* UpdateChildLeft on an arithmetic node;
* a whole list suspended by activating a depth it does not have.

To change the cluster size, set `N` (at most 16 with 4-bit IDs) and
`ALU_DEPTH` on `lambda_cluster`. Changing the ID width means editing
`ID_W` in the package. Name values are always `2*ID_W` bits wide.

## Where this departs from, or fills in, the source

* **Not built: functions and beta reduction.** The earlier architecture's
  functions and beta reduction are missing, and so are the instructions only
  they use (AncestorTransformation, DescendantTransformation and CompareValue
  as actions). A list re-sends ReturnExpression with its target set to the
  child it links to, as the source describes. But no node here answers it
  beyond what it already drives on its expression bus. A Function node simply
  holds its contents.
* **Filled in: UpdateChildLeft/Right.** The source does not describe them.
  It only says UpdateDepth works like UpdateChildLeft, except that it targets
  by depth. So here they target a node by its ID and copy the pointer from the
  PEB.
* **Not built: links between clusters.** Several clusters joined by a shared
  bus is not built. The host port stands where a cluster's root connection
  would be.
* **Own choices.** These are this design's own: the timing (registered
  outputs, one hop per clock), the codes, the host port and configuration
  writes, the arbiter, the allocator's policy and the ALU stack depth. So are
  the ALU latency (one cycle) and 8-bit wrap-around.
* **Where the GoTo points.** The source's pseudocode for comparisons suggests
  the resulting GoTo follows its *left* pointer, but its node diagram shows
  GoTo using only its *right* child. This design follows the diagram: the
  chosen branch is moved into the right pointer.
* **Where the depth travels.** A list node sends its depth up in the `uni`
  field, as the source's list table says. The source's discussion also
  describes the depth being mistaken for an instruction key by a Name above
  the list, which would mean it travels in the key field. In this design a
  list node sends its right child's key upward unchanged, next to the depth.
  A Name above a list ignores its child buses, so this confusion cannot arise.
* **Depth numbering in the published results.** The source's results table
  reads the *outermost* item of `(γ a.(γ b.∅))` at depth 0. Its list section
  defines depth as the number of lists nested inside, which makes the
  outermost item depth 1. This design follows the list section: the tail is
  depth 0.
* **Unexplained table entries.** The source's table of arithmetic-node
  outputs shows `{-, Raised, -, -}` on the child instruction buses. It does
  not explain this, and it is not modelled. For the irreducible comparison,
  the table lists its contents under the left-child bus. The text says they
  go to the parent, which is what is built.
* **Holding register.** AddBottomNode and Add/Mult use one extra 8-bit
  register per node. It holds the ALU result, or the new item's pointer, for
  the cycle between sending Nullification or the new link and changing the
  node's own registers.
* **Irreducible Flag is loaded, not worked out.** The host loads `rdf`. The
  source does not say how a comparison learns that it has no ancestor.
