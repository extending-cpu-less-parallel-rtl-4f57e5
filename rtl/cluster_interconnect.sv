// cluster_interconnect: the connective bus of one cluster. It joins every
// node to the nodes its child pointers name, so that a node's child-side
// buses meet the child's parent-side buses.
//
// For node i with left pointer L (and an expression type that uses its left
// child), node i's CLI/CLE inputs are node L's PIB/PEB outputs, and node
// L's PIB/PEB inputs are node i's CLI/CLE outputs; the right pointer works
// the same way through CRI/CRE. A pointer of 0 is NULL and connects
// nothing; a Name's pointer registers hold its value and are ignored. Node
// 0 is the root slot: its parent side is the cluster's host port. Should two
// nodes point to the same child (a graph error the paper calls a data
// collision) their outputs are ORed on the child's inputs, as on a shared
// bus.
//
// The paper shows each node reaching a local shared connective bus through a
// selector and leaves the bus's insides to the earlier architecture; here the
// selectors are multiplexers steered by the child pointers, which is this
// design's choice. Purely combinational.
module cluster_interconnect
  import lambda_pkg::*;
#(
  parameter int unsigned N = NODES
) (
  input  node_state_t state_i  [N],
  // outputs of the nodes
  input  ins_bus_t    pib_o_i  [N],
  input  expr_bus_t   peb_o_i  [N],
  input  ins_bus_t    cli_o_i  [N],
  input  expr_bus_t   cle_o_i  [N],
  input  ins_bus_t    cri_o_i  [N],
  input  expr_bus_t   cre_o_i  [N],
  // inputs of the nodes
  output ins_bus_t    pib_i_o  [N],
  output expr_bus_t   peb_i_o  [N],
  output ins_bus_t    cli_i_o  [N],
  output expr_bus_t   cle_i_o  [N],
  output ins_bus_t    cri_i_o  [N],
  output expr_bus_t   cre_i_o  [N],
  // host port, acting as the parent of node 0
  input  ins_bus_t    host_pib_i,
  input  expr_bus_t   host_peb_i,
  output ins_bus_t    host_pib_o,
  output expr_bus_t   host_peb_o
);

  logic [N-1:0] lvalid, rvalid;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      lvalid[i] = uses_left(state_i[i].exp)  && state_i[i].clp != '0 &&
                  32'(state_i[i].clp) < N;
      rvalid[i] = uses_right(state_i[i].exp) && state_i[i].crp != '0 &&
                  32'(state_i[i].crp) < N;
    end
  end

  // child side: select the child's parent-facing outputs
  always_comb begin
    for (int i = 0; i < N; i++) begin
      cli_i_o[i] = '0;
      cle_i_o[i] = '0;
      cri_i_o[i] = '0;
      cre_i_o[i] = '0;
      for (int j = 1; j < N; j++) begin
        if (lvalid[i] && state_i[i].clp == node_id_t'(j)) begin
          cli_i_o[i] = pib_o_i[j];
          cle_i_o[i] = peb_o_i[j];
        end
        if (rvalid[i] && state_i[i].crp == node_id_t'(j)) begin
          cri_i_o[i] = pib_o_i[j];
          cre_i_o[i] = peb_o_i[j];
        end
      end
    end
  end

  // parent side: gather whatever points at each node
  always_comb begin
    pib_i_o[0] = host_pib_i;
    peb_i_o[0] = host_peb_i;
    for (int j = 1; j < N; j++) begin
      pib_i_o[j] = '0;
      peb_i_o[j] = '0;
      for (int i = 0; i < N; i++) begin
        if (lvalid[i] && state_i[i].clp == node_id_t'(j)) begin
          pib_i_o[j] = ins_bus_t'(pib_i_o[j] | cli_o_i[i]);
          peb_i_o[j] = expr_bus_t'(peb_i_o[j] | cle_o_i[i]);
        end
        if (rvalid[i] && state_i[i].crp == node_id_t'(j)) begin
          pib_i_o[j] = ins_bus_t'(pib_i_o[j] | cri_o_i[i]);
          peb_i_o[j] = expr_bus_t'(peb_i_o[j] | cre_o_i[i]);
        end
      end
    end
  end

  assign host_pib_o = pib_o_i[0];
  assign host_peb_o = peb_o_i[0];

endmodule
