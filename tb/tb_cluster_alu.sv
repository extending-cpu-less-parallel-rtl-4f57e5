// tb_cluster_alu: self-checking test of the cluster ALU and its request
// stack.
//
// Checks each operation against a reference computed here, the one-cycle
// service latency of a lone request, last-in first-out service of requests
// that pile up while new ones keep arriving, that a new request always
// delays processing, the synchronous clear, and random traffic against a
// model of the stack. Runs at a reduced stack depth of 4 so that random
// traffic fills the stack often.
module tb_cluster_alu;
  import lambda_pkg::*;

  localparam int DEPTH = 4;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  logic     clear = 1'b0;
  logic     req_valid = 1'b0;
  alu_req_t req = '0;
  alu_rsp_t rsp;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic     overflow;

  int checks = 0, failures = 0;

  cluster_alu #(.DEPTH(DEPTH)) dut (
    .clk         (clk),
    .rst_n       (rst_n),
    .clear_i     (clear),
    .req_valid_i (req_valid),
    .req_i       (req),
    .rsp_o       (rsp),
    .count_o     (count),
    .overflow_o  (overflow)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0t] %s", $time, what);
    end
  endtask

  function automatic value_t ref_alu(alu_op_t op, value_t a, value_t b);
    int sa;
    sa = (a >= 128) ? int'(a) - 256 : int'(a);
    case (op)
      ALU_ADD: return value_t'((int'(a) + int'(b)) % 256);
      ALU_MUL: return value_t'((int'(a) * int'(b)) % 256);
      ALU_GTZ: return (sa > 0) ? 8'd1 : 8'd0;
      ALU_LTZ: return (sa < 0) ? 8'd1 : 8'd0;
      ALU_EQZ: return (sa == 0) ? 8'd1 : 8'd0;
      default: return 8'd0;
    endcase
  endfunction

  function automatic alu_req_t mk(int id, alu_op_t op, int a, int b);
    return '{id: node_id_t'(id), op: op, a: value_t'(a), b: value_t'(b)};
  endfunction

  // drive one request for one cycle
  task automatic push(input alu_req_t r);
    @(negedge clk);
    req_valid = 1'b1;
    req       = r;
    @(negedge clk);
    req_valid = 1'b0;
  endtask

  // queue model for random traffic
  alu_req_t model [$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // 1. each operation, lone request: answered one cycle after acceptance
    begin
      alu_req_t cases [12];
      cases[0] = mk(3, ALU_ADD, 1, 1);
      cases[1] = mk(4, ALU_ADD, 127, 127);
      cases[2] = mk(5, ALU_MUL, 3, 3);
      cases[3] = mk(6, ALU_MUL, 100, 3);
      cases[4] = mk(7, ALU_GTZ, 1, 0);
      cases[5] = mk(8, ALU_GTZ, 8'hFF, 0);
      cases[6] = mk(9, ALU_LTZ, 8'hFF, 0);
      cases[7] = mk(10, ALU_LTZ, 0, 0);
      cases[8] = mk(11, ALU_EQZ, 0, 0);
      cases[9] = mk(12, ALU_EQZ, 8'h80, 0);
      cases[10] = mk(13, ALU_GTZ, 0, 0);
      cases[11] = mk(14, ALU_MUL, 8'hFE, 8'h03);
      foreach (cases[i]) begin
        push(cases[i]);          // accepted at the edge inside push
        // we are now one negedge after acceptance; the result edge follows
        check(!rsp.valid, "no response in the acceptance cycle");
        @(negedge clk);
        check(rsp.valid, $sformatf("case %0d answered one cycle after acceptance", i));
        check(rsp.id == cases[i].id, $sformatf("case %0d ID", i));
        check(rsp.q == ref_alu(cases[i].op, cases[i].a, cases[i].b),
              $sformatf("case %0d Q=%0d expected %0d", i, rsp.q,
                        ref_alu(cases[i].op, cases[i].a, cases[i].b)));
        @(negedge clk);
        check(!rsp.valid, "status is a single-cycle pulse");
      end
    end

    // 2. three back-to-back requests: no processing while requests arrive,
    //    then served last-in first-out
    @(negedge clk);
    req_valid = 1'b1; req = mk(1, ALU_ADD, 10, 1);
    @(negedge clk);
    check(!rsp.valid, "busy stack: no result while pushing");
    req = mk(2, ALU_ADD, 20, 2);
    @(negedge clk);
    check(!rsp.valid, "busy stack: no result while pushing (2)");
    req = mk(3, ALU_ADD, 30, 3);
    @(negedge clk);
    req_valid = 1'b0;
    check(count == 3, $sformatf("three requests stacked (%0d)", count));
    check(!rsp.valid, "busy stack: no result while pushing (3)");
    @(negedge clk);
    check(rsp.valid && rsp.id == 3 && rsp.q == 33, "LIFO: last request served first");
    @(negedge clk);
    check(rsp.valid && rsp.id == 2 && rsp.q == 22, "LIFO: second");
    @(negedge clk);
    check(rsp.valid && rsp.id == 1 && rsp.q == 11, "LIFO: first request served last");
    @(negedge clk);
    check(!rsp.valid && count == 0, "stack empty");

    // 3. clear empties the stack
    push(mk(5, ALU_ADD, 1, 2));
    @(negedge clk);  // consumed by now; push two more without a gap
    req_valid = 1'b1; req = mk(6, ALU_ADD, 1, 2);
    @(negedge clk);
    req = mk(7, ALU_ADD, 1, 2);
    @(negedge clk);
    req_valid = 1'b0; clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    check(count == 0, "clear empties the stack");
    repeat (2) @(negedge clk);
    check(!rsp.valid, "nothing served after clear");

    // 4. random traffic against a LIFO model (never more than DEPTH waiting)
    model.delete();
    for (int n = 0; n < 400; n++) begin
      alu_req_t x;
      bit do_push;
      @(negedge clk);
      // check a result produced by the previous edge
      if (rsp.valid) begin
        alu_req_t top;
        check(model.size() > 0, "random: response with a request pending");
        if (model.size() > 0) begin
          top = model.pop_front();
          check(rsp.id == top.id && rsp.q == ref_alu(top.op, top.a, top.b),
                "random: response matches LIFO model");
        end
      end
      do_push = ($urandom_range(0, 1) == 1) && (model.size() < DEPTH);
      x = mk($urandom_range(0, 15), alu_op_t'($urandom_range(0, 4)),
             $urandom_range(0, 255), $urandom_range(0, 255));
      req_valid = do_push;
      req       = x;
      if (do_push) model.push_front(x);
    end
    @(negedge clk);
    req_valid = 1'b0;
    check(!overflow, "no overflow in random traffic");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
