// tb_lambda_node: self-checking test of a single node, with its
// neighbours, the ALU and the allocator played by the testbench.
//
// Checks, expression type by expression type, the registered outputs a
// node drives one cycle after its inputs (Name, GoTo, Application, List in
// both activity states with the depth rule, and the re-targeting of
// ReturnExpression at the linked child), the list instructions
// ActivateDepth, UpdateDepth, AddBottomNode (two cycles, with a node
// allocation) and RemoveBottomNode (two cycles), the Add / Mult sequence
// (request held until granted, result taken only for this node's ID,
// children nullified, then a Name), both outcomes of a comparison to zero
// with ImmediateResolution, the irreducible comparison, the application's
// response to ImmediateResolution, Algorithm-6 forwarding, UpdateChildLeft
// and UpdateChildRight (only at the node they name), Nullification and
// UpdateExpression.
module tb_lambda_node;
  import lambda_pkg::*;

  localparam int ID = 5;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        cfg_we = 1'b0;
  node_state_t cfg_state = '0;
  ins_bus_t    pib_i = '0, cli_i = '0, cri_i = '0;
  expr_bus_t   peb_i = '0, cle_i = '0, cre_i = '0;
  ins_bus_t    pib_o, cli_o, cri_o;
  expr_bus_t   peb_o, cle_o, cre_o;
  logic        alloc_req, alloc_gnt = 1'b0;
  node_id_t    alloc_id = '0;
  logic        alu_req_valid, alu_gnt = 1'b0;
  alu_req_t    alu_req;
  alu_rsp_t    alu_rsp = '0;
  node_state_t st;

  int checks = 0, failures = 0;

  lambda_node #(.NODE_ID(ID)) dut (
    .clk (clk), .rst_n (rst_n), .cfg_we_i (cfg_we), .cfg_state_i (cfg_state),
    .pib_i (pib_i), .peb_i (peb_i), .cli_i (cli_i), .cle_i (cle_i),
    .cri_i (cri_i), .cre_i (cre_i),
    .pib_o (pib_o), .peb_o (peb_o), .cli_o (cli_o), .cle_o (cle_o),
    .cri_o (cri_o), .cre_o (cre_o),
    .alloc_req_o (alloc_req), .alloc_gnt_i (alloc_gnt), .alloc_id_i (alloc_id),
    .alu_req_valid_o (alu_req_valid), .alu_req_o (alu_req), .alu_gnt_i (alu_gnt),
    .alu_rsp_i (alu_rsp), .state_o (st)
  );

  always #5 clk = ~clk;

  localparam ins_bus_t  NUL = '{key: INS_NULLIFICATION, uni: '0};
  localparam expr_bus_t E0  = '0;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0t] %s", $time, what);
    end
  endtask

  task automatic quiet();
    pib_i = '0; cli_i = '0; cri_i = '0;
    peb_i = '0; cle_i = '0; cre_i = '0;
    alloc_gnt = 1'b0; alloc_id = '0; alu_gnt = 1'b0; alu_rsp = '0;
  endtask

  task automatic cfg(input exp_t e, input bit rsf, input bit rdf, input int clp, input int crp);
    @(negedge clk);
    quiet();
    cfg_we    = 1'b1;
    cfg_state = '{exp: e, rsf: rsf, rdf: rdf, clp: node_id_t'(clp), crp: node_id_t'(crp)};
    @(negedge clk);
    cfg_we    = 1'b0;
  endtask

  // apply the inputs set by the caller for one clock
  task automatic step();
    @(negedge clk);
  endtask

  function automatic ins_bus_t I(ins_key_t k, int u);
    return '{key: k, uni: node_id_t'(u)};
  endfunction

  function automatic expr_bus_t E(bit rsf, bit rdf, int clp, int crp);
    return '{rsf: rsf, rdf: rdf, clp: node_id_t'(clp), crp: node_id_t'(crp)};
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- Name
    cfg(EXP_NAME, 1'b1, 1'b0, 4'h3, 4'hC);
    step();
    check(peb_o == E(1, 0, 3, 12), "Name reports RSF and its value");
    check(pib_o == '0 && cli_o == '0 && cri_o == '0, "Name drives no instruction");

    // ---- GoTo: straight through to the right child
    cfg(EXP_GOTO, 1'b0, 1'b0, 0, 7);
    pib_i = I(INS_RETURN_EXPRESSION, 9); peb_i = E(0, 1, 2, 3);
    cri_i = I(INS_COMPARE_VALUE, 4);     cre_i = E(1, 0, 5, 6);
    step();
    check(cri_o == I(INS_RETURN_EXPRESSION, 9) && cre_o == E(0, 1, 2, 3), "GoTo passes parent down");
    check(pib_o == I(INS_COMPARE_VALUE, 4) && peb_o == E(1, 0, 5, 6), "GoTo passes child up");
    check(cli_o == '0 && cle_o == '0, "GoTo leaves left side idle");

    // ---- List, RSF = 0 (Table 1)
    cfg(EXP_LIST, 1'b0, 1'b0, 2, 3);
    pib_i = I(INS_RETURN_EXPRESSION, 1); peb_i = E(0, 0, 9, 9);
    cli_i = I(INS_COMPARE_VALUE, 8);     cle_i = E(1, 0, 4, 4);
    cri_i = I(INS_NONE, 2);              cre_i = E(1, 0, 7, 7);
    step();
    check(pib_o == I(INS_NONE, 3), "inactive list: depth 2 from child, sends 3 up");
    check(peb_o == E(1, 0, 7, 7), "inactive list: PEB from right child");
    check(cri_o == I(INS_RETURN_EXPRESSION, 3) && cre_o == E(0, 0, 9, 9), "inactive list: parent to right child");
    check(cli_o == '0 && cle_o == '0, "inactive list: item disconnected");

    // ActivateDepth, no match (target 1, depth 2): stays inactive, forwards down
    pib_i = I(INS_ACTIVATE_DEPTH, 1);
    step();
    check(!st.rsf, "ActivateDepth mismatch: RSF 0");
    check(cri_o == I(INS_ACTIVATE_DEPTH, 1), "ActivateDepth forwarded down the chain");
    // match (target 2)
    pib_i = I(INS_ACTIVATE_DEPTH, 2);
    step();
    check(st.rsf, "ActivateDepth match: RSF 1");
    pib_i = I(INS_RETURN_EXPRESSION, 1);
    step();
    // List, RSF = 1
    check(pib_o == I(INS_COMPARE_VALUE, 3), "active list: instruction from item, depth+1");
    check(peb_o == E(1, 0, 4, 4), "active list: PEB from item");
    check(cli_o == I(INS_RETURN_EXPRESSION, 2) && cle_o == E(0, 0, 9, 9), "active list: parent to item");
    check(cri_o == '0 && cre_o == '0, "active list: rest of list disconnected");
    pib_i = I(INS_RETURN_EXPRESSION, 15);
    step();
    check(cli_o == I(INS_RETURN_EXPRESSION, 2) && cri_o == '0, "active list re-targets ReturnExpression at its item");
    pib_i = I(INS_ACTIVATE_DEPTH, 0);
    step();
    check(!st.rsf && cri_o == I(INS_ACTIVATE_DEPTH, 0), "active list deactivated, instruction forwarded");
    pib_i = I(INS_RETURN_EXPRESSION, 15);
    step();
    check(cri_o == I(INS_RETURN_EXPRESSION, 3) && cli_o == '0, "inactive list re-targets ReturnExpression down the list");

    // UpdateDepth
    pib_i = I(INS_UPDATE_DEPTH, 1); peb_i = E(0, 0, 11, 0);
    step();
    check(st.clp == 4'd2, "UpdateDepth at another depth ignored");
    pib_i = I(INS_UPDATE_DEPTH, 2);
    step();
    check(st.clp == 4'd11, "UpdateDepth at own depth sets CLP from PEB");

    // RemoveBottomNode: depth must be 1
    cfg(EXP_LIST, 1'b0, 1'b0, 2, 3);
    cri_i = I(INS_NONE, 1);              // child is the tail (depth 0 -> sends 1)
    pib_i = I(INS_REMOVE_BOTTOM_NODE, 0);
    step();
    pib_i = '0;
    check(cri_o == NUL, "RemoveBottomNode: Nullification to the tail");
    check(st.crp == 4'd3, "RemoveBottomNode: pointer kept for one cycle");
    step();
    check(st.crp == 4'd0, "RemoveBottomNode: pointer cleared on second cycle");
    check(cri_o == '0, "RemoveBottomNode: Nullification was a single pulse");

    // AddBottomNode: tail (crp 0) asks for a node, links it, sends UpdateExpression
    cfg(EXP_LIST, 1'b0, 1'b0, 2, 0);
    pib_i = I(INS_ADD_BOTTOM_NODE, 0); peb_i = E(0, 0, 13, 0);
    #1;
    check(alloc_req, "AddBottomNode: tail requests a node");
    alloc_gnt = 1'b1; alloc_id = 4'd9;
    step();
    pib_i = '0; peb_i = '0; alloc_gnt = 1'b0;
    check(st.crp == 4'd9, "AddBottomNode: CRP set to the new node");
    step();
    check(cri_o == I(INS_UPDATE_EXPRESSION, int'(EXP_LIST)) && cre_o == E(0, 0, 13, 0),
          "AddBottomNode: UpdateExpression with the item to the new node");
    step();
    check(cri_o == '0, "AddBottomNode: single UpdateExpression");

    // ---- Add: needs both children resolved
    cfg(EXP_ADD, 1'b0, 1'b0, 2, 3);
    cle_i = E(1, 0, 0, 7);
    step();
    check(!alu_req_valid, "Add waits for both children");
    cre_i = E(1, 0, 0, 5);
    #1;
    check(alu_req_valid && alu_req.id == ID && alu_req.op == ALU_ADD &&
          alu_req.a == 8'd7 && alu_req.b == 8'd5, "Add requests the ALU with both values");
    step();                              // not granted
    check(alu_req_valid, "Add holds its request until granted");
    alu_gnt = 1'b1;
    step();
    alu_gnt = 1'b0;
    #1;
    check(!alu_req_valid, "request dropped after grant");
    alu_rsp = '{valid: 1'b1, id: 4'd6, q: 8'd99};   // someone else's result
    step();
    alu_rsp = '0;
    check(st.exp == EXP_ADD && cli_o == '0, "result for another node ignored");
    alu_rsp = '{valid: 1'b1, id: node_id_t'(ID), q: 8'd12};
    step();
    alu_rsp = '0;
    check(cli_o == NUL && cri_o == NUL, "Add nullifies both children");
    check(st.exp == EXP_ADD, "Add keeps its pointers while nullifying");
    step();
    check(st == '{exp: EXP_NAME, rsf: 1'b1, rdf: 1'b0, clp: 4'h0, crp: 4'hC}, "Add became Name 12");
    step();
    check(peb_o == E(1, 0, 0, 12), "new Name reports its value");

    // ---- Mult opcode
    cfg(EXP_MULT, 1'b0, 1'b0, 2, 3);
    cle_i = E(1, 0, 0, 3); cre_i = E(1, 0, 0, 3);
    #1;
    check(alu_req_valid && alu_req.op == ALU_MUL, "Mult requests a multiplication");

    // ---- GreatZero, reducible, true
    cfg(EXP_GREATZERO, 1'b0, 1'b0, 2, 3);
    step();
    check(!alu_req_valid, "comparison waits for its ancestor");
    peb_i = E(1, 0, 0, 1);
    #1;
    check(alu_req_valid && alu_req.op == ALU_GTZ && alu_req.a == 8'd1, "comparison sends ancestor value");
    alu_gnt = 1'b1;
    step();
    alu_gnt = 1'b0;
    alu_rsp = '{valid: 1'b1, id: node_id_t'(ID), q: 8'd1};
    step();
    alu_rsp = '0;
    check(pib_o == I(INS_IMMEDIATE_RESOLUTION, ID), "ImmediateResolution sent to parent");
    check(cri_o == NUL && cli_o == '0, "true: right branch nullified");
    step();
    check(st.exp == EXP_GOTO && st.crp == 4'd2 && st.clp == 4'd0, "true: GoTo to left child");

    // ---- LessZero, reducible, false
    cfg(EXP_LESSZERO, 1'b0, 1'b0, 2, 3);
    peb_i = E(1, 0, 0, 1);
    alu_gnt = 1'b1;
    step();
    alu_gnt = 1'b0;
    alu_rsp = '{valid: 1'b1, id: node_id_t'(ID), q: 8'd0};
    step();
    alu_rsp = '0;
    check(cli_o == NUL && cri_o == '0, "false: left branch nullified");
    step();
    check(st.exp == EXP_GOTO && st.crp == 4'd3 && st.clp == 4'd0, "false: GoTo to right child");

    // ---- EqualZero, irreducible
    cfg(EXP_EQUALZERO, 1'b0, 1'b1, 2, 3);
    peb_i = E(1, 0, 0, 0);
    cle_i = E(1, 0, 0, 1);
    step();
    check(!alu_req_valid && peb_o == E(0, 1, 2, 3), "irreducible: no ALU use, not yet resolved");
    cre_i = E(1, 0, 0, 2);
    step();
    check(peb_o == E(1, 1, 2, 3), "irreducible: RSF raised once both children resolved");
    pib_i = I(INS_DESCENDANT_TRANSFORMATION, 4); peb_i = E(0, 0, 6, 7);
    step();
    check(cli_o == I(INS_DESCENDANT_TRANSFORMATION, 4) && cri_o == I(INS_DESCENDANT_TRANSFORMATION, 4),
          "Algorithm 6: forwarded to both branches");
    check(cle_o == E(0, 0, 6, 7) && cre_o == E(0, 0, 6, 7), "Algorithm 6: parent's PEB to both branches");
    // UpdateChildLeft / Right act only on the node they name
    pib_i = I(INS_UPDATE_CHILD_LEFT, 4); peb_i = E(0, 0, 9, 8);
    step();
    check(st.clp == 4'd2 && st.crp == 4'd3, "UpdateChildLeft for another node ignored");
    pib_i = I(INS_UPDATE_CHILD_LEFT, ID);
    step();
    check(st.clp == 4'd9 && st.crp == 4'd3, "UpdateChildLeft: CLP from PEB");
    pib_i = I(INS_UPDATE_CHILD_RIGHT, ID);
    step();
    check(st.clp == 4'd9 && st.crp == 4'd8, "UpdateChildRight: CRP from PEB");
    check(st.exp == EXP_EQUALZERO && st.rdf, "UpdateChild keeps the expression");
    pib_i = '0; peb_i = '0;

    // ---- Application
    cfg(EXP_APPLICATION, 1'b0, 1'b0, 2, 3);
    pib_i = I(INS_ACTIVATE_DEPTH, 1);
    cre_i = E(1, 0, 0, 9); cle_i = E(0, 0, 1, 1);
    step();
    check(cli_o == I(INS_ACTIVATE_DEPTH, 1) && cri_o == I(INS_ACTIVATE_DEPTH, 1), "application: both children");
    check(cle_o == E(1, 0, 0, 9), "application: argument is the function side's ancestor");
    check(peb_o == E(0, 0, 2, 3), "application: not resolved yet");
    pib_i = '0;
    cli_i = I(INS_IMMEDIATE_RESOLUTION, 2);
    step();
    cli_i = '0;
    check(cri_o == NUL, "application: argument nullified on ImmediateResolution");
    step();
    check(st.exp == EXP_GOTO && st.crp == 4'd2, "application became GoTo to left child");

    // ---- Nullification and UpdateExpression
    cfg(EXP_APPLICATION, 1'b0, 1'b0, 2, 3);
    pib_i = NUL;
    step();
    pib_i = '0;
    check(cli_o == NUL && cri_o == NUL, "Nullification passed to both children");
    step();
    check(st.exp == EXP_EMPTY && st.clp == 0 && st.crp == 0, "node emptied");
    pib_i = I(INS_UPDATE_EXPRESSION, int'(EXP_LIST)); peb_i = E(0, 0, 6, 0);
    step();
    quiet();
    check(st == '{exp: EXP_LIST, rsf: 1'b0, rdf: 1'b0, clp: 4'd6, crp: 4'd0}, "UpdateExpression");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
