// node_allocator: hands a free node's ID to a node that asks for a new
// node (the NewNodeID a list tail needs for AddBottomNode).
//
// A node is free while its expression register holds EXP_EMPTY. Node 0 is
// the cluster's root slot and is never handed out, because ID 0 is the NULL
// pointer. Requests are served one per cycle: the lowest-numbered requester
// wins, and it receives the lowest-numbered free node. An ID handed out is
// held back for one further cycle (the new node is still empty until the
// requester's UpdateExpression reaches it), so two back-to-back requests
// do not receive the same node.
//
// The paper only names this function; the priority order, the hold-back
// and the combinational grant (gnt_o and id_o are valid in the request
// cycle) are this design's choices.
module node_allocator
  import lambda_pkg::*;
#(
  parameter int unsigned N = NODES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     free_i,   // node i is empty
  input  logic [N-1:0]     req_i,    // node i asks for a new node
  output logic [N-1:0]     gnt_o,    // one-hot grant
  output node_id_t         id_o,     // the free node handed out
  output logic             none_free_o
);

  node_id_t held_q;
  logic     held_valid_q;
  logic     found;

  always_comb begin
    found = 1'b0;
    id_o  = '0;
    for (int i = N - 1; i >= 1; i--) begin
      if (free_i[i] && !(held_valid_q && held_q == node_id_t'(i))) begin
        found = 1'b1;
        id_o  = node_id_t'(i);
      end
    end
    none_free_o = !found;

    gnt_o = '0;
    if (found) begin
      for (int i = N - 1; i >= 0; i--) begin
        if (req_i[i]) gnt_o = N'(1) << i;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_q       <= '0;
      held_valid_q <= 1'b0;
    end else begin
      held_valid_q <= |gnt_o;
      held_q       <= id_o;
    end
  end

  a_onehot : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt_o));

endmodule
