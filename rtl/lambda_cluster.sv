// lambda_cluster: a work cluster of N reduction nodes sharing one ALU.
//
// The host writes a program graph into the nodes (one node per expression,
// through cfg_*), then talks to the root node, node 0, through the host
// port: the host acts as the root's parent, drives the root's PIB/PEB inputs
// and reads the root's PIB/PEB outputs. The nodes then reduce the graph by
// themselves, exchanging instructions and expressions one hop per clock
// over the cluster interconnect. Arithmetic and comparison nodes queue
// their requests on the shared cluster ALU; a fixed-priority arbiter
// (lowest node ID first) picks the one request the ALU stack can take per
// cycle, and a waiting node keeps its request raised. The ALU's result is
// broadcast with the requester's ID and taken by that node. The node
// allocator serves list nodes that need a new node (AddBottomNode).
//
// Host-port protocol (this design's choice): instructions on host_pib_i are
// one-cycle pulses; an expression on host_peb_i is held steady while an
// instruction that reads it (UpdateDepth, AddBottomNode) runs. The reduced
// result appears on host_peb_o as the root's expression; every node's
// registers can also be read on node_state_o.
//
// Follows the paper: 16 nodes with 4-bit IDs, ID 0 as NULL, one ALU per
// cluster with a request stack. This design's own: the arbiter, the
// configuration port, node 0 as the root slot and the observation outputs.
module lambda_cluster
  import lambda_pkg::*;
#(
  parameter int unsigned N           = NODES,
  parameter int unsigned ALU_DEPTH   = STACK_DEPTH
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        cfg_we_i,
  input  node_id_t    cfg_id_i,
  input  node_state_t cfg_state_i,
  // host port (parent of the root node 0)
  input  ins_bus_t    host_pib_i,
  input  expr_bus_t   host_peb_i,
  output ins_bus_t    host_pib_o,
  output expr_bus_t   host_peb_o,
  // cluster ALU clear
  input  logic        alu_clear_i,
  // observation
  output node_state_t node_state_o [N],
  output logic        alu_overflow_o,
  output logic [$clog2(ALU_DEPTH+1)-1:0] alu_pending_o,  // requests waiting in the ALU stack
  output logic        alloc_none_free_o                 // no empty node left
);

  ins_bus_t    pib_o [N], cli_o [N], cri_o [N];
  expr_bus_t   peb_o [N], cle_o [N], cre_o [N];
  ins_bus_t    pib_i [N], cli_i [N], cri_i [N];
  expr_bus_t   peb_i [N], cle_i [N], cre_i [N];
  node_state_t state [N];

  logic [N-1:0] alloc_req, alloc_gnt, free, alu_valid, alu_gnt;
  alu_req_t     alu_req [N];
  node_id_t     alloc_id;

  alu_req_t alu_sel;
  logic     alu_push;
  alu_rsp_t alu_rsp;

  for (genvar g = 0; g < N; g++) begin : g_node
    lambda_node #(.NODE_ID(g)) u_node (
      .clk             (clk),
      .rst_n           (rst_n),
      .cfg_we_i        (cfg_we_i && cfg_id_i == node_id_t'(g)),
      .cfg_state_i     (cfg_state_i),
      .pib_i           (pib_i[g]),
      .peb_i           (peb_i[g]),
      .cli_i           (cli_i[g]),
      .cle_i           (cle_i[g]),
      .cri_i           (cri_i[g]),
      .cre_i           (cre_i[g]),
      .pib_o           (pib_o[g]),
      .peb_o           (peb_o[g]),
      .cli_o           (cli_o[g]),
      .cle_o           (cle_o[g]),
      .cri_o           (cri_o[g]),
      .cre_o           (cre_o[g]),
      .alloc_req_o     (alloc_req[g]),
      .alloc_gnt_i     (alloc_gnt[g]),
      .alloc_id_i      (alloc_id),
      .alu_req_valid_o (alu_valid[g]),
      .alu_req_o       (alu_req[g]),
      .alu_gnt_i       (alu_gnt[g]),
      .alu_rsp_i       (alu_rsp),
      .state_o         (state[g])
    );
    assign free[g] = (state[g].exp == EXP_EMPTY);
  end

  cluster_interconnect #(.N(N)) u_net (
    .state_i    (state),
    .pib_o_i    (pib_o),
    .peb_o_i    (peb_o),
    .cli_o_i    (cli_o),
    .cle_o_i    (cle_o),
    .cri_o_i    (cri_o),
    .cre_o_i    (cre_o),
    .pib_i_o    (pib_i),
    .peb_i_o    (peb_i),
    .cli_i_o    (cli_i),
    .cle_i_o    (cle_i),
    .cri_i_o    (cri_i),
    .cre_i_o    (cre_i),
    .host_pib_i (host_pib_i),
    .host_peb_i (host_peb_i),
    .host_pib_o (host_pib_o),
    .host_peb_o (host_peb_o)
  );

  node_allocator #(.N(N)) u_alloc (
    .clk         (clk),
    .rst_n       (rst_n),
    .free_i      (free),
    .req_i       (alloc_req),
    .gnt_o       (alloc_gnt),
    .id_o        (alloc_id),
    .none_free_o (alloc_none_free_o)
  );

  // ALU arbiter: lowest requesting node ID wins
  always_comb begin
    alu_gnt  = '0;
    alu_sel  = '0;
    alu_push = 1'b0;
    for (int i = N - 1; i >= 0; i--) begin
      if (alu_valid[i]) begin
        alu_gnt  = N'(1) << i;
        alu_sel  = alu_req[i];
        alu_push = 1'b1;
      end
    end
  end

  cluster_alu #(.DEPTH(ALU_DEPTH)) u_alu (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear_i     (alu_clear_i),
    .req_valid_i (alu_push),
    .req_i       (alu_sel),
    .rsp_o       (alu_rsp),
    .count_o     (alu_pending_o),
    .overflow_o  (alu_overflow_o)
  );

  assign node_state_o = state;

endmodule
