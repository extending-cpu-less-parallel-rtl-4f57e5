// tb_lambda_cluster: end-to-end test of a 16-node cluster at its default
// size.
//
// Each test writes a small program graph into the nodes through the
// configuration port, lets the cluster reduce it, and compares the root's
// expression (read on the host port) and the registers of every node with
// the reduction worked out by hand:
//   * arithmetic: 1+1, (1+1)+(1+1), 3*3, 127+127 and 100*3 (8-bit wrap);
//   * comparisons to zero under an application (ancestor input), each
//     kind with a true and a false ancestor, including the GreatZero
//     example with -1 and 1 as ancestor;
//   * an irreducible comparison (no ancestor) raising its resolve flag, and
//     CompareValue forwarded through it to both branches, then its left
//     branch re-pointed with UpdateChildLeft;
//   * a five-item list, queried at depths 0, 1, 3 and 4 with
//     ActivateDepth, suspended as a whole by activating a depth it does not
//     have, then UpdateDepth, AddBottomNode and RemoveBottomNode;
//   * a two-item list whose items are an addition and a multiplication.
// Reduction times are checked against the tick counts reported for the same
// expressions (Table 3 of the source publication: 16 ticks for a single
// operation, 48 for the nested addition) as upper bounds. Each mechanism
// (ALU stacking, nullification, GoTo transformation, ImmediateResolution,
// list activation, UpdateDepth, node allocation, node removal,
// irreducible comparison, Algorithm-6 forwarding, UpdateChildLeft, list
// suspension) is counted and must occur.
module tb_lambda_cluster;
  import lambda_pkg::*;

  localparam int N = NODES;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        cfg_we = 1'b0;
  node_id_t    cfg_id = '0;
  node_state_t cfg_state = '0;
  ins_bus_t    host_pib_i = '0;
  expr_bus_t   host_peb_i = '0;
  ins_bus_t    host_pib_o;
  expr_bus_t   host_peb_o;
  node_state_t st [N];
  logic        alu_overflow, none_free;
  logic [$clog2(STACK_DEPTH+1)-1:0] alu_pending;

  int checks = 0, failures = 0;
  int cyc = 0;

  // mechanism counters
  int n_stack2 = 0, n_nullify = 0, n_goto = 0, n_immres = 0, n_activate = 0;
  int n_upddepth = 0, n_alloc = 0, n_remove = 0, n_irred = 0, n_alg6 = 0;
  int n_alu_rsp = 0, n_suspend = 0, n_updchild = 0;

  lambda_cluster dut (
    .clk               (clk),
    .rst_n             (rst_n),
    .cfg_we_i          (cfg_we),
    .cfg_id_i          (cfg_id),
    .cfg_state_i       (cfg_state),
    .host_pib_i        (host_pib_i),
    .host_peb_i        (host_peb_i),
    .host_pib_o        (host_pib_o),
    .host_peb_o        (host_peb_o),
    .alu_clear_i       (1'b0),
    .node_state_o      (st),
    .alu_overflow_o    (alu_overflow),
    .alu_pending_o     (alu_pending),
    .alloc_none_free_o (none_free)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------------------------------------------------------- monitors
  node_state_t prev [N];
  always @(posedge clk) begin
    if (rst_n && !cfg_we) begin
      if (alu_pending >= 2) n_stack2++;
      if (dut.u_alu.rsp_o.valid) n_alu_rsp++;
      if (|dut.alloc_gnt) n_alloc++;
      for (int i = 0; i < N; i++) begin
        if (prev[i].exp != EXP_EMPTY && st[i].exp == EXP_EMPTY) n_nullify++;
        if (prev[i].exp != EXP_GOTO && st[i].exp == EXP_GOTO) n_goto++;
        if (st[i].exp == EXP_APPLICATION &&
            dut.cli_i[i].key == INS_IMMEDIATE_RESOLUTION) n_immres++;
        if (st[i].exp inside {EXP_GREATZERO, EXP_LESSZERO, EXP_EQUALZERO} &&
            st[i].rdf && dut.peb_o[i].rsf) n_irred++;
      end
    end
    prev <= st;
  end

  // ------------------------------------------------------------------ helpers
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0t] %s", $time, what);
    end
  endtask

  task automatic cfg(input int id, input exp_t e, input bit rsf, input bit rdf,
                     input int clp, input int crp);
    @(negedge clk);
    cfg_we    = 1'b1;
    cfg_id    = node_id_t'(id);
    cfg_state = '{exp: e, rsf: rsf, rdf: rdf, clp: node_id_t'(clp), crp: node_id_t'(crp)};
    @(negedge clk);
    cfg_we    = 1'b0;
  endtask

  task automatic name(input int id, input int v);
    cfg(id, EXP_NAME, 1'b1, 1'b0, (v >> 4) & 15, v & 15);
  endtask

  task automatic clear_all();
    for (int i = 0; i < N; i++) cfg(i, EXP_EMPTY, 1'b0, 1'b0, 0, 0);
    repeat (3) @(negedge clk);
  endtask

  function automatic int value_of(expr_bus_t e);
    return {e.clp, e.crp};
  endfunction

  // wait until the root reports a resolved Name; returns the cycles taken
  task automatic wait_root_name(input int limit, output int took);
    int start = cyc;
    took = -1;
    while (cyc - start < limit) begin
      @(negedge clk);
      if (st[0].exp == EXP_NAME && host_peb_o.rsf) begin
        took = cyc - start;
        break;
      end
    end
  endtask

  task automatic pulse(input ins_key_t k, input int uni);
    @(negedge clk);
    host_pib_i = '{key: k, uni: node_id_t'(uni)};
    @(negedge clk);
    host_pib_i = '0;
  endtask

  function automatic int count_empty();
    int c = 0;
    for (int i = 0; i < N; i++) if (st[i].exp == EXP_EMPTY) c++;
    return c;
  endfunction

  // --------------------------------------------------------------- test cases
  task automatic t_binop(input exp_t op, input int a, input int b, input int expect_v,
                         input int tick_bound, input string tag);
    int took;
    clear_all();
    cfg(0, op, 1'b0, 1'b0, 1, 2);
    name(1, a);
    name(2, b);
    wait_root_name(200, took);
    check(took >= 0, {tag, ": root became a Name"});
    check(value_of(host_peb_o) == (expect_v & 255), $sformatf("%s: value %0d expected %0d",
          tag, value_of(host_peb_o), expect_v & 255));
    repeat (4) @(negedge clk);
    check(st[1].exp == EXP_EMPTY && st[2].exp == EXP_EMPTY, {tag, ": operands nullified"});
    check(took >= 0 && took <= tick_bound, $sformatf("%s: %0d cycles, bound %0d", tag, took, tick_bound));
    $display("%s reduced in %0d cycles", tag, took);
  endtask

  task automatic t_nested_add();
    int took;
    clear_all();
    cfg(0, EXP_ADD, 1'b0, 1'b0, 1, 2);
    cfg(1, EXP_ADD, 1'b0, 1'b0, 3, 4);
    cfg(2, EXP_ADD, 1'b0, 1'b0, 5, 6);
    name(3, 1);
    name(5, 1);
    // the last operands of both inner additions arrive in back-to-back
    // cycles, so their ALU requests meet in the stack
    @(negedge clk);
    cfg_we    = 1'b1;
    cfg_id    = 4'd4;
    cfg_state = '{exp: EXP_NAME, rsf: 1'b1, rdf: 1'b0, clp: 4'd0, crp: 4'd1};
    @(negedge clk);
    cfg_id    = 4'd6;
    @(negedge clk);
    cfg_we    = 1'b0;
    wait_root_name(300, took);
    check(took >= 0 && value_of(host_peb_o) == 4, "(1+1)+(1+1) = 4");
    check(took >= 0 && took <= 48, $sformatf("nested add: %0d cycles, bound 48", took));
    repeat (4) @(negedge clk);
    check(count_empty() == N - 1, "nested add: six nodes freed");
    $display("(1+1)+(1+1) reduced in %0d cycles", took);
  endtask

  // Application(Cmp(Name a, Name b), Name x): reduces to a if (x op 0) else b
  task automatic t_cmp(input exp_t op, input int x, input bit expect_left, input string tag);
    int start, took;
    expr_bus_t want;
    clear_all();
    cfg(0, EXP_APPLICATION, 1'b0, 1'b0, 1, 4);
    cfg(1, op, 1'b0, 1'b0, 2, 3);
    name(2, 8'h0A);
    name(3, 8'h0B);
    name(4, x);
    want  = '{rsf: 1'b1, rdf: 1'b0, clp: 4'h0, crp: expect_left ? 4'hA : 4'hB};
    start = cyc;
    took  = -1;
    while (cyc - start < 200) begin
      @(negedge clk);
      if (st[0].exp == EXP_GOTO && st[1].exp == EXP_GOTO && host_peb_o == want) begin
        took = cyc - start;
        break;
      end
    end
    check(took >= 0, {tag, ": root reads the chosen branch"});
    repeat (4) @(negedge clk);
    check(st[0].crp == 4'd1, {tag, ": application became GoTo to comparison"});
    check(st[1].crp == (expect_left ? 4'd2 : 4'd3), {tag, ": comparison became GoTo to branch"});
    check(st[4].exp == EXP_EMPTY, {tag, ": ancestor removed"});
    check(st[expect_left ? 3 : 2].exp == EXP_EMPTY, {tag, ": other branch nullified"});
    check(st[expect_left ? 2 : 3].exp == EXP_NAME, {tag, ": chosen branch kept"});
    check(took >= 0 && took <= 16, $sformatf("%s: %0d cycles, bound 16", tag, took));
    $display("%s reduced in %0d cycles", tag, took);
  endtask

  task automatic t_irreducible();
    int start;
    bit seen;
    clear_all();
    cfg(0, EXP_GREATZERO, 1'b0, 1'b1, 1, 2);
    name(1, 8'h0A);
    name(2, 8'h0B);
    seen  = 1'b0;
    start = cyc;
    while (cyc - start < 20) begin
      @(negedge clk);
      if (host_peb_o.rsf && host_peb_o.rdf) seen = 1'b1;
    end
    check(seen, "irreducible comparison raises RSF once both children resolved");
    check(host_peb_o.clp == 4'd1 && host_peb_o.crp == 4'd2, "irreducible comparison reports its pointers");
    check(st[0].exp == EXP_GREATZERO, "irreducible comparison does not transform");
    // Algorithm 6: CompareValue reaches both branches
    fork
      pulse(INS_COMPARE_VALUE, 5);
      begin
        int got = 0;
        repeat (4) begin
          @(posedge clk);
          if (dut.pib_i[1].key == INS_COMPARE_VALUE && dut.pib_i[2].key == INS_COMPARE_VALUE) got++;
        end
        check(got == 1, "CompareValue forwarded to both branches once");
        if (got > 0) n_alg6++;
      end
    join
    // re-point the comparison's left branch at another name
    name(3, 8'h0C);
    @(negedge clk);
    host_pib_i = '{key: INS_UPDATE_CHILD_LEFT, uni: 4'd0};
    host_peb_i = '{rsf: 1'b0, rdf: 1'b0, clp: 4'd3, crp: 4'd0};
    @(negedge clk);
    host_pib_i = '0;
    host_peb_i = '0;
    check(st[0].clp == 4'd3 && st[0].crp == 4'd2 && st[0].exp == EXP_GREATZERO,
          "UpdateChildLeft re-points the comparison's left branch");
    repeat (3) @(negedge clk);
    check(host_peb_o.clp == 4'd3 && host_peb_o.rsf, "comparison reports the new branch, still resolved");
    if (st[0].clp == 4'd3) n_updchild++;
  endtask

  // five-item list (g4 e.(g3 d.(g2 c.(g1 b.(g0 a.NULL)))))
  // list nodes 0..4 (node 4 is the tail), items 5..9 hold 0xA1..0xA5
  task automatic build_list();
    clear_all();
    for (int i = 0; i < 5; i++) cfg(i, EXP_LIST, 1'b0, 1'b0, 5 + i, (i < 4) ? i + 1 : 0);
    for (int i = 0; i < 5; i++) name(5 + i, 8'hA5 - i);
    repeat (12) @(negedge clk);
  endtask

  task automatic activate(input int d, input int expect_v, input string tag);
    pulse(INS_ACTIVATE_DEPTH, d);
    repeat (16) @(negedge clk);
    check(host_peb_o.rsf && value_of(host_peb_o) == expect_v,
          $sformatf("%s: depth %0d reads %02h, expected %02h", tag, d, value_of(host_peb_o), expect_v));
    begin
      int act = 0;
      for (int i = 0; i < N; i++) if (st[i].exp == EXP_LIST && st[i].rsf) act++;
      check(act == 1, $sformatf("%s: exactly one active list node (%0d)", tag, act));
    end
    n_activate++;
  endtask

  task automatic t_list();
    int used;
    build_list();
    check(host_peb_o.rsf == 1'b0, "inactive list reports nothing resolved");
    check(host_pib_o.uni == 4'd5, $sformatf("root list passes depth+1 = 5 upward (%0d)", host_pib_o.uni));
    activate(0, 8'hA1, "list");
    activate(1, 8'hA2, "list");
    activate(3, 8'hA4, "list");
    activate(4, 8'hA5, "list");
    // an invalid depth suspends every item
    pulse(INS_ACTIVATE_DEPTH, 9);
    repeat (16) @(negedge clk);
    begin
      int act = 0;
      for (int i = 0; i < N; i++) if (st[i].exp == EXP_LIST && st[i].rsf) act++;
      check(act == 0 && !host_peb_o.rsf, "invalid depth: whole list suspended");
      if (act == 0) n_suspend++;
    end
    // UpdateDepth: depth-1 list (node 3) now points at a new item, node 10
    name(10, 8'h77);
    @(negedge clk);
    host_peb_i = '{rsf: 1'b0, rdf: 1'b0, clp: 4'd10, crp: 4'd0};
    pulse(INS_UPDATE_DEPTH, 1);
    host_peb_i = '0;
    repeat (10) @(negedge clk);
    check(st[3].clp == 4'd10, "UpdateDepth rewired the depth-1 item");
    check(st[2].clp == 4'd7 && st[4].clp == 4'd9, "UpdateDepth left other depths alone");
    if (st[3].clp == 4'd10) n_upddepth++;
    activate(1, 8'h77, "after UpdateDepth");
    // AddBottomNode: new tail holding item node 11
    name(11, 8'h55);
    used = N - count_empty();
    @(negedge clk);
    host_peb_i = '{rsf: 1'b0, rdf: 1'b0, clp: 4'd11, crp: 4'd0};
    pulse(INS_ADD_BOTTOM_NODE, 0);
    repeat (10) @(negedge clk);
    host_peb_i = '0;
    check(N - count_empty() == used + 1, "AddBottomNode took one free node");
    check(st[4].crp != 4'd0 && st[st[4].crp].exp == EXP_LIST && st[st[4].crp].clp == 4'd11 &&
          st[st[4].crp].crp == 4'd0, "old tail points to a new list tail holding the item");
    activate(0, 8'h55, "after AddBottomNode");
    check(host_pib_o.uni == 4'd6, $sformatf("list now six deep (%0d)", host_pib_o.uni));
    activate(1, 8'hA1, "after AddBottomNode");
    // RemoveBottomNode: the depth-1 node drops the tail and its item
    used = N - count_empty();
    pulse(INS_REMOVE_BOTTOM_NODE, 0);
    repeat (12) @(negedge clk);
    check(st[4].crp == 4'd0, "RemoveBottomNode cut the tail");
    check(N - count_empty() == used - 2, "RemoveBottomNode freed tail and item");
    check(st[11].exp == EXP_EMPTY, "removed item nullified");
    if (st[4].crp == 4'd0) n_remove++;
    activate(0, 8'hA1, "after RemoveBottomNode");
  endtask

  // list with arithmetic items, (g1 (+ 3.3).(g0 (* 3.3).NULL)): the items
  // reduce in place, and the activated depth selects which result the root
  // reads
  task automatic t_list_arith();
    clear_all();
    cfg(0, EXP_LIST, 1'b0, 1'b0, 2, 1);
    cfg(1, EXP_LIST, 1'b0, 1'b0, 5, 0);
    cfg(2, EXP_ADD,  1'b0, 1'b0, 3, 4);
    name(3, 3);
    name(4, 3);
    cfg(5, EXP_MULT, 1'b0, 1'b0, 6, 7);
    name(6, 3);
    name(7, 3);
    repeat (20) @(negedge clk);
    check(st[2].exp == EXP_NAME && {st[2].clp, st[2].crp} == 8'd6, "list item 3+3 reduced to 6");
    check(st[5].exp == EXP_NAME && {st[5].clp, st[5].crp} == 8'd9, "list item 3*3 reduced to 9");
    activate(1, 8'd6, "arithmetic list");
    activate(0, 8'd9, "arithmetic list");
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    for (int i = 0; i < N; i++) prev[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    t_binop(EXP_ADD,  1, 1, 2, 16, "1+1");
    t_binop(EXP_MULT, 3, 3, 9, 16, "3*3");
    t_binop(EXP_ADD,  127, 127, 254, 16, "127+127");
    t_binop(EXP_MULT, 100, 3, 300, 16, "100*3");
    t_nested_add();
    t_cmp(EXP_LESSZERO,  8'hFF, 1'b1, "(< a.b) -1");
    t_cmp(EXP_LESSZERO,  8'h01, 1'b0, "(< a.b) 1");
    t_cmp(EXP_EQUALZERO, 8'h00, 1'b1, "(== a.b) 0");
    t_cmp(EXP_EQUALZERO, 8'h01, 1'b0, "(== a.b) 1");
    t_cmp(EXP_GREATZERO, 8'h01, 1'b1, "(> a.b) 1");
    t_cmp(EXP_GREATZERO, 8'hFF, 1'b0, "(> a.b) -1");
    t_irreducible();
    t_list();
    t_list_arith();

    check(!alu_overflow, "ALU stack never overflowed");
    check(n_stack2 > 0,  "mechanism: ALU stack held several requests");
    check(n_alu_rsp > 0, "mechanism: ALU status returned results");
    check(n_nullify > 0, "mechanism: nullification");
    check(n_goto > 0,    "mechanism: transformation to GoTo");
    check(n_immres > 0,  "mechanism: ImmediateResolution");
    check(n_activate > 0, "mechanism: ActivateDepth");
    check(n_upddepth > 0, "mechanism: UpdateDepth");
    check(n_alloc > 0,   "mechanism: node allocation (AddBottomNode)");
    check(n_remove > 0,  "mechanism: RemoveBottomNode");
    check(n_irred > 0,   "mechanism: irreducible comparison");
    check(n_alg6 > 0,    "mechanism: CompareValue forwarded by arithmetic node");
    check(n_suspend > 0, "mechanism: list suspended by an invalid depth");
    check(n_updchild > 0, "mechanism: UpdateChildLeft on an arithmetic node");
    $display("mechanisms: stack>=2 %0d, alu results %0d, nullified %0d, goto %0d, immres %0d, activate %0d, upddepth %0d, alloc %0d, remove %0d, irreducible %0d, alg6 %0d",
             n_stack2, n_alu_rsp, n_nullify, n_goto, n_immres, n_activate, n_upddepth,
             n_alloc, n_remove, n_irred, n_alg6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
