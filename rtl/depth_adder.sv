// depth_adder: the small local adder a list node uses to keep the depth
// count running along a chain of list nodes.
//
// A list node learns its own depth from its right child (the next list
// down the chain) and passes its depth plus one to its parent. A NULL right
// pointer (ID 0) means the node is the tail of the list, whose depth is 0.
// The adder is ID_W bits wide, the width of a node ID, as the paper
// prescribes; a chain deeper than 2**ID_W - 1 wraps (this design's choice;
// a cluster cannot hold such a chain anyway).
//
// Purely combinational: depth_o and depth_up_o follow the inputs in the
// same cycle.
module depth_adder
  import lambda_pkg::*;
(
  input  node_id_t crp_i,        // the node's right child pointer
  input  node_id_t child_up_i,   // UNI field arriving from the right child
  output node_id_t depth_o,      // this node's depth
  output node_id_t depth_up_o    // depth + 1, sent to the parent
);

  assign depth_o    = (crp_i == '0) ? '0 : child_up_i;
  assign depth_up_o = depth_o + node_id_t'(1);

endmodule
