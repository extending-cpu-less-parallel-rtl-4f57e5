// lambda_node: one node of a lambda-calculus reduction cluster, extended
// with list and arithmetic expressions.
//
// A node holds one expression of the program graph in five values: the
// expression register (exp), the Resolve Flag (rsf), the Irreducible Flag
// (rdf) and the left / right child pointers (clp, crp). It talks to its
// parent over PIB (instructions) and PEB (expressions), and to its children
// over CLI / CLE and CRI / CRE. Every bus has an incoming and an outgoing
// half. All outgoing buses are registered: a message moves one hop per
// clock. What a node drives depends on its expression type:
//
//   Name         PEB <- {RSF=1, RDF=0, value}; the 8-bit value sits in clp:crp.
//   Application  instructions from the parent go to both children; the
//                argument's (right child's) expression is passed to the
//                function side (left child) as its ancestor input; PEB
//                reports the node with RSF = both children resolved. On
//                ImmediateResolution from the left child it nullifies the
//                argument and becomes a GoTo to its left child.
//   GoTo         passes everything straight between parent and right child.
//   List         Table 1 of the paper: with RSF=0 the parent is linked to
//                the right child (the rest of the list), with RSF=1 to the
//                left child (the item). Upward it sends depth+1 in the UNI
//                field, where depth comes from the right child (0 at the
//                tail). Handles ActivateDepth, UpdateDepth, AddBottomNode
//                and RemoveBottomNode, and re-sends ReturnExpression with
//                its target set to the child it currently links to.
//   Add / Mult   once both children report RSF, requests the cluster ALU
//                with the two children's values, then nullifies both
//                children and becomes a Name holding the result.
//   GreatZero / LessZero / EqualZero
//                reducible (RDF=0): once the ancestor input (PEB from the
//                parent) reports RSF, asks the ALU to compare its value to
//                zero; if true it nullifies the right branch and becomes a
//                GoTo to the left child, otherwise it nullifies the left
//                branch and becomes a GoTo to the right child. Either way
//                it sends ImmediateResolution to its parent.
//                irreducible (RDF=1): raises RSF on PEB once both children
//                are resolved, and reports its contents to the parent.
//   Arithmetic   all of the above forward CompareValue and
//                DescendantTransformation, with the parent's PEB, to both
//                children (Algorithm 6).
//   Any node     Nullification: passes Nullification to its children and
//                becomes empty one cycle later. UpdateExpression: takes
//                the expression type from the UNI field and flags and
//                pointers from PEB. UpdateChildLeft / UpdateChildRight,
//                when the UNI field is this node's ID: CLP <- PEB's CLP /
//                CRP <- PEB's CRP. A node that is not the target routes
//                them like any other instruction.
//
// Follows the paper: the five stored values, the bus names, the routing of
// Name, Application, GoTo and List nodes (Fig. 1, Fig. 3, Table 1), the
// list instructions (Algorithms 1-4), the arithmetic triggers and
// transformations (Sec. 3, Algorithm 5, Fig. 7), the depth rule and the
// use of a shared ALU (Sec. 4). This design's own choices: registered
// outputs, the instruction and expression codes, the one-cycle hand-over
// phases (a node keeps its pointers for one cycle after sending
// Nullification so that the message reaches the child), the extra holding
// register (the result of Add / Mult, or the item pointer AddBottomNode
// brings on PEB, which UpdateDepth and AddBottomNode carry down the list
// in step with the instruction), and UpdateExpression carrying the new expression
// type in its UNI field. Function nodes and beta reduction (the prior
// architecture this one extends) are not built: a Function node only holds
// and reports its contents.
module lambda_node
  import lambda_pkg::*;
#(
  parameter int unsigned NODE_ID = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration by the host
  input  logic        cfg_we_i,
  input  node_state_t cfg_state_i,
  // buses, incoming
  input  ins_bus_t    pib_i,
  input  expr_bus_t   peb_i,
  input  ins_bus_t    cli_i,
  input  expr_bus_t   cle_i,
  input  ins_bus_t    cri_i,
  input  expr_bus_t   cre_i,
  // buses, outgoing (registered)
  output ins_bus_t    pib_o,
  output expr_bus_t   peb_o,
  output ins_bus_t    cli_o,
  output expr_bus_t   cle_o,
  output ins_bus_t    cri_o,
  output expr_bus_t   cre_o,
  // node allocation (AddBottomNode)
  output logic        alloc_req_o,
  input  logic        alloc_gnt_i,
  input  node_id_t    alloc_id_i,
  // cluster ALU
  output logic        alu_req_valid_o,
  output alu_req_t    alu_req_o,
  input  logic        alu_gnt_i,
  input  alu_rsp_t    alu_rsp_i,
  // observation
  output node_state_t state_o
);

  typedef enum logic [3:0] {
    PH_IDLE,
    PH_ALU_REQ,    // waiting for the ALU arbiter
    PH_ALU_WAIT,   // request stacked, waiting for the ALU status
    PH_FIN_NAME,   // Add/Mult: children nullified, become a Name
    PH_FIN_LEFT,   // comparison / application: become GoTo to left child
    PH_FIN_RIGHT,  // comparison: become GoTo to right child
    PH_DYING,      // Nullification passed on, become empty
    PH_ADD_LINK,   // AddBottomNode, second cycle
    PH_CUT         // RemoveBottomNode, second cycle
  } phase_t;

  localparam node_id_t MY_ID = node_id_t'(NODE_ID);
  localparam ins_bus_t NULLIFY = '{key: INS_NULLIFICATION, uni: '0};

  node_state_t st_q, st_n;
  phase_t      ph_q, ph_n;
  value_t      res_q, res_n;

  ins_bus_t  pib_n, cli_n, cri_n;
  expr_bus_t peb_n, cle_n, cre_n;

  node_id_t depth, depth_up;

  depth_adder u_depth (
    .crp_i      (st_q.crp),
    .child_up_i (cri_i.uni),
    .depth_o    (depth),
    .depth_up_o (depth_up)
  );

  logic is_addmul, is_cmp, rsp_mine;
  assign is_addmul = st_q.exp inside {EXP_ADD, EXP_MULT};
  assign is_cmp    = st_q.exp inside {EXP_GREATZERO, EXP_LESSZERO, EXP_EQUALZERO};
  assign rsp_mine  = alu_rsp_i.valid && alu_rsp_i.id == MY_ID;

  function automatic alu_op_t op_of(exp_t e);
    unique case (e)
      EXP_ADD:       return ALU_ADD;
      EXP_MULT:      return ALU_MUL;
      EXP_GREATZERO: return ALU_GTZ;
      EXP_LESSZERO:  return ALU_LTZ;
      EXP_EQUALZERO: return ALU_EQZ;
      default:       return ALU_ADD;
    endcase
  endfunction

  always_comb begin
    st_n  = st_q;
    ph_n  = ph_q;
    res_n = res_q;
    pib_n = '0;
    peb_n = '0;
    cli_n = '0;
    cle_n = '0;
    cri_n = '0;
    cre_n = '0;
    alloc_req_o     = 1'b0;
    alu_req_valid_o = 1'b0;
    alu_req_o       = '{id: MY_ID, op: op_of(st_q.exp), a: '0, b: '0};

    unique case (ph_q)
      PH_DYING: begin
        st_n = '{exp: EXP_EMPTY, rsf: 1'b0, rdf: 1'b0, clp: '0, crp: '0};
        ph_n = PH_IDLE;
      end
      PH_FIN_NAME: begin
        st_n = '{exp: EXP_NAME, rsf: 1'b1, rdf: 1'b0,
                 clp: res_q[VAL_W-1:ID_W], crp: res_q[ID_W-1:0]};
        ph_n = PH_IDLE;
      end
      PH_FIN_LEFT: begin
        st_n.exp = EXP_GOTO;
        st_n.crp = st_q.clp;
        st_n.clp = '0;
        ph_n     = PH_IDLE;
      end
      PH_FIN_RIGHT: begin
        st_n.exp = EXP_GOTO;
        st_n.clp = '0;
        ph_n     = PH_IDLE;
      end
      PH_ADD_LINK: begin
        // the new tail adopts the expression on PEB as a list node
        cri_n = '{key: INS_UPDATE_EXPRESSION, uni: node_id_t'(EXP_LIST)};
        cre_n = '{rsf: 1'b0, rdf: 1'b0, clp: res_q[VAL_W-1:ID_W], crp: '0};
        pib_n = '{key: INS_NONE, uni: depth_up};
        ph_n  = PH_IDLE;
      end
      PH_CUT: begin
        st_n.crp = '0;
        pib_n    = '{key: INS_NONE, uni: depth_up};
        ph_n     = PH_IDLE;
      end
      default: begin
        if (pib_i.key == INS_NULLIFICATION && st_q.exp != EXP_EMPTY) begin
          if (uses_left(st_q.exp))  cli_n = NULLIFY;
          if (uses_right(st_q.exp)) cri_n = NULLIFY;
          ph_n = PH_DYING;
        end else if (pib_i.key == INS_UPDATE_EXPRESSION) begin
          st_n = '{exp: exp_t'(pib_i.uni), rsf: peb_i.rsf, rdf: peb_i.rdf,
                   clp: peb_i.clp, crp: peb_i.crp};
          ph_n = PH_IDLE;
        end else if (pib_i.key == INS_UPDATE_CHILD_LEFT && pib_i.uni == MY_ID) begin
          st_n.clp = peb_i.clp;
        end else if (pib_i.key == INS_UPDATE_CHILD_RIGHT && pib_i.uni == MY_ID) begin
          st_n.crp = peb_i.crp;
        end else begin
          unique case (st_q.exp)
            EXP_NAME: begin
              peb_n = '{rsf: 1'b1, rdf: 1'b0, clp: st_q.clp, crp: st_q.crp};
            end

            EXP_FUNCTION: begin
              peb_n = '{rsf: st_q.rsf, rdf: st_q.rdf, clp: st_q.clp, crp: st_q.crp};
            end

            EXP_APPLICATION: begin
              peb_n = '{rsf: cle_i.rsf & cre_i.rsf, rdf: st_q.rdf,
                        clp: st_q.clp, crp: st_q.crp};
              cli_n = pib_i;
              cri_n = pib_i;
              cle_n = cre_i;            // ancestor input of the function side
              if (cli_i.key == INS_IMMEDIATE_RESOLUTION) begin
                cli_n = '0;
                cri_n = NULLIFY;        // the argument has been consumed
                ph_n  = PH_FIN_LEFT;
              end
            end

            EXP_GOTO: begin
              pib_n = cri_i;
              peb_n = cre_i;
              cri_n = pib_i;
              cre_n = peb_i;
            end

            EXP_LIST: begin
              // Table 1: default outputs
              if (!st_q.rsf) begin
                pib_n = '{key: cri_i.key, uni: depth_up};
                peb_n = cre_i;
                cri_n = pib_i;
                cre_n = peb_i;
              end else begin
                pib_n = '{key: cli_i.key, uni: depth_up};
                peb_n = cle_i;
                cli_n = pib_i;
                cle_n = peb_i;
              end
              unique case (pib_i.key)
                INS_ACTIVATE_DEPTH: begin     // Algorithm 1
                  cri_n    = pib_i;
                  st_n.rsf = (pib_i.uni == depth);
                end
                INS_UPDATE_DEPTH: begin       // Algorithm 2
                  cri_n = pib_i;
                  cre_n = peb_i;
                  if (pib_i.uni == depth) st_n.clp = peb_i.clp;
                end
                INS_ADD_BOTTOM_NODE: begin    // Algorithm 3, first cycle
                  cri_n = pib_i;
                  cre_n = peb_i;
                  if (depth == '0) begin
                    res_n       = {peb_i.clp, peb_i.crp};  // the new item
                    alloc_req_o = 1'b1;
                    if (alloc_gnt_i) begin
                      st_n.crp = alloc_id_i;
                      ph_n     = PH_ADD_LINK;
                    end
                  end
                end
                INS_RETURN_EXPRESSION: begin  // re-targeted at the linked child
                  if (st_q.rsf) cli_n = '{key: INS_RETURN_EXPRESSION, uni: st_q.clp};
                  else          cri_n = '{key: INS_RETURN_EXPRESSION, uni: st_q.crp};
                end
                INS_REMOVE_BOTTOM_NODE: begin // Algorithm 4
                  if (depth == node_id_t'(1)) begin
                    cri_n = NULLIFY;
                    ph_n  = PH_CUT;
                  end else begin
                    cri_n = pib_i;
                  end
                end
                default: ;
              endcase
            end

            EXP_ADD, EXP_MULT: begin
              if (ph_q == PH_ALU_WAIT) begin
                if (rsp_mine) begin
                  res_n = alu_rsp_i.q;
                  cli_n = NULLIFY;
                  cri_n = NULLIFY;
                  ph_n  = PH_FIN_NAME;
                end
              end else if (ph_q == PH_ALU_REQ || (cle_i.rsf && cre_i.rsf)) begin
                alu_req_valid_o = 1'b1;
                alu_req_o.a     = {cle_i.clp, cle_i.crp};
                alu_req_o.b     = {cre_i.clp, cre_i.crp};
                ph_n            = alu_gnt_i ? PH_ALU_WAIT : PH_ALU_REQ;
              end
            end

            EXP_GREATZERO, EXP_LESSZERO, EXP_EQUALZERO: begin
              if (st_q.rdf) begin
                // irreducible: behaves like an irreducible function
                peb_n = '{rsf: cle_i.rsf & cre_i.rsf, rdf: 1'b1,
                          clp: st_q.clp, crp: st_q.crp};
              end else if (ph_q == PH_ALU_WAIT) begin
                if (rsp_mine) begin          // Algorithm 5
                  pib_n = '{key: INS_IMMEDIATE_RESOLUTION, uni: MY_ID};
                  if (alu_rsp_i.q[0]) begin
                    cri_n = NULLIFY;
                    ph_n  = PH_FIN_LEFT;
                  end else begin
                    cli_n = NULLIFY;
                    ph_n  = PH_FIN_RIGHT;
                  end
                end
              end else if (ph_q == PH_ALU_REQ || peb_i.rsf) begin
                alu_req_valid_o = 1'b1;
                alu_req_o.a     = {peb_i.clp, peb_i.crp};
                ph_n            = alu_gnt_i ? PH_ALU_WAIT : PH_ALU_REQ;
              end
            end

            default: ;   // EXP_EMPTY
          endcase

          // Algorithm 6: arithmetic nodes pass these to both branches
          if ((is_addmul || is_cmp) &&
              pib_i.key inside {INS_COMPARE_VALUE, INS_DESCENDANT_TRANSFORMATION}) begin
            cli_n = pib_i;
            cle_n = peb_i;
            cri_n = pib_i;
            cre_n = peb_i;
          end
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= '{exp: EXP_EMPTY, rsf: 1'b0, rdf: 1'b0, clp: '0, crp: '0};
      ph_q  <= PH_IDLE;
      res_q <= '0;
      pib_o <= '0;
      peb_o <= '0;
      cli_o <= '0;
      cle_o <= '0;
      cri_o <= '0;
      cre_o <= '0;
    end else if (cfg_we_i) begin
      st_q  <= cfg_state_i;
      ph_q  <= PH_IDLE;
      res_q <= '0;
      pib_o <= '0;
      peb_o <= '0;
      cli_o <= '0;
      cle_o <= '0;
      cri_o <= '0;
      cre_o <= '0;
    end else begin
      st_q  <= st_n;
      ph_q  <= ph_n;
      res_q <= res_n;
      pib_o <= pib_n;
      peb_o <= peb_n;
      cli_o <= cli_n;
      cle_o <= cle_n;
      cri_o <= cri_n;
      cre_o <= cre_n;
    end
  end

  assign state_o = st_q;

  // A request, once raised, is held until the arbiter grants it.
  a_req_held : assert property (@(posedge clk) disable iff (!rst_n || cfg_we_i)
    alu_req_valid_o && !alu_gnt_i |=> alu_req_valid_o);

endmodule
