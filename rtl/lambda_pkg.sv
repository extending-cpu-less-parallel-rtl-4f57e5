// lambda_pkg: types and constants shared by the nodes, the interconnect,
// the allocator and the cluster ALU of a lambda-calculus reduction cluster.
//
// A cluster holds NODES graph nodes. Every node has a unique ID of ID_W
// bits; ID 0 doubles as the NULL child pointer, so node 0 can only be the
// root of the graph (nothing may point to it). A Name node holds a VAL_W-bit
// two's-complement value, stored across its two child-pointer registers
// (left pointer = high nibble, right pointer = low nibble), which is why
// VAL_W = 2*ID_W.
//
// Two kinds of bus link neighbouring nodes:
//   * instruction bus (PIB towards the parent, CLI / CRI towards the
//     children): an instruction key plus a UNI field. The UNI field holds a
//     target node ID, a target list depth, or, travelling upward from a
//     list, the list's depth + 1.
//   * expression bus (PEB, CLE, CRE): a node's contents as
//     {RSF, RDF, CLP, CRP}.
//
// The sixteen node IDs, the 4-bit pointers, the 8-bit names and the
// expression-bus field order follow the paper; the numeric codes of
// expression types, instructions and ALU opcodes are this design's own,
// except ReturnExpression = 2, which the paper states.
package lambda_pkg;

  localparam int unsigned NODES       = 16;
  localparam int unsigned ID_W        = 4;
  localparam int unsigned VAL_W       = 2 * ID_W;
  localparam int unsigned EXP_W       = 4;
  localparam int unsigned INS_W       = 4;
  localparam int unsigned OP_W        = 3;
  localparam int unsigned STACK_DEPTH = NODES;

  typedef logic [ID_W-1:0]  node_id_t;
  typedef logic [VAL_W-1:0] value_t;

  // Expression register: the kind of expression a node represents.
  typedef enum logic [EXP_W-1:0] {
    EXP_EMPTY       = 4'd0,   // free node, available to the allocator
    EXP_NAME        = 4'd1,
    EXP_FUNCTION    = 4'd2,   // held and routed nowhere: beta reduction is not built
    EXP_APPLICATION = 4'd3,
    EXP_GOTO        = 4'd4,
    EXP_LIST        = 4'd5,
    EXP_ADD         = 4'd6,
    EXP_MULT        = 4'd7,
    EXP_GREATZERO   = 4'd8,
    EXP_LESSZERO    = 4'd9,
    EXP_EQUALZERO   = 4'd10
  } exp_t;

  // Instruction keys carried on the instruction buses.
  typedef enum logic [INS_W-1:0] {
    INS_NONE                     = 4'd0,
    INS_NULLIFICATION            = 4'd1,
    INS_RETURN_EXPRESSION        = 4'd2,
    INS_UPDATE_EXPRESSION        = 4'd3,
    INS_UPDATE_CHILD_LEFT        = 4'd4,
    INS_UPDATE_CHILD_RIGHT       = 4'd5,
    INS_IMMEDIATE_RESOLUTION     = 4'd6,
    INS_ANCESTOR_TRANSFORMATION  = 4'd7,
    INS_COMPARE_VALUE            = 4'd8,
    INS_DESCENDANT_TRANSFORMATION = 4'd9,
    INS_ACTIVATE_DEPTH           = 4'd10,
    INS_UPDATE_DEPTH             = 4'd11,
    INS_ADD_BOTTOM_NODE          = 4'd12,
    INS_REMOVE_BOTTOM_NODE       = 4'd13
  } ins_key_t;

  typedef struct packed {
    ins_key_t key;
    node_id_t uni;
  } ins_bus_t;

  typedef struct packed {
    logic     rsf;   // Resolve Flag (activity flag for a list node)
    logic     rdf;   // Irreducible Flag
    node_id_t clp;   // left child pointer (high nibble of a Name's value)
    node_id_t crp;   // right child pointer (low nibble of a Name's value)
  } expr_bus_t;

  // Everything a node stores: the expression register, the two flags and
  // the two child pointers.
  typedef struct packed {
    exp_t     exp;
    logic     rsf;
    logic     rdf;
    node_id_t clp;
    node_id_t crp;
  } node_state_t;

  // Cluster ALU operations.
  typedef enum logic [OP_W-1:0] {
    ALU_ADD = 3'd0,
    ALU_MUL = 3'd1,
    ALU_GTZ = 3'd2,   // Q = (operand 1 >  0)
    ALU_LTZ = 3'd3,   // Q = (operand 1 <  0)
    ALU_EQZ = 3'd4    // Q = (operand 1 == 0)
  } alu_op_t;

  // One entry of the ALU request stack: the "D" input of the cluster ALU.
  typedef struct packed {
    node_id_t id;
    alu_op_t  op;
    value_t   a;
    value_t   b;
  } alu_req_t;

  typedef struct packed {
    logic     valid;  // the ALU's status output
    node_id_t id;
    value_t   q;
  } alu_rsp_t;

  // Which child buses an expression type routes through (Fig. 1 and the
  // list / arithmetic definitions). The interconnect only follows a
  // pointer of a type that uses it; a Name's pointers hold its value.
  function automatic logic uses_left(exp_t e);
    return e inside {EXP_APPLICATION, EXP_LIST, EXP_ADD, EXP_MULT,
                     EXP_GREATZERO, EXP_LESSZERO, EXP_EQUALZERO};
  endfunction

  function automatic logic uses_right(exp_t e);
    return e inside {EXP_APPLICATION, EXP_GOTO, EXP_LIST, EXP_ADD, EXP_MULT,
                     EXP_GREATZERO, EXP_LESSZERO, EXP_EQUALZERO};
  endfunction

endpackage
