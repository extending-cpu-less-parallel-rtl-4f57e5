// tb_node_allocator: self-checking test of the free-node allocator.
//
// Checks that the lowest free node other than node 0 is handed out, that
// the lowest requester is granted, that nothing is granted when no node is
// free, and that a node handed out is held back for one cycle so that a
// back-to-back request gets a different node. Random free/request patterns
// are compared with a reference computed here.
module tb_node_allocator;
  import lambda_pkg::*;

  localparam int N = NODES;

  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic [N-1:0] free = '0, req = '0, gnt;
  node_id_t     id;
  logic         none_free;
  int checks = 0, failures = 0;

  node_allocator #(.N(N)) dut (
    .clk (clk), .rst_n (rst_n), .free_i (free), .req_i (req),
    .gnt_o (gnt), .id_o (id), .none_free_o (none_free)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL [%0t] %s", $time, what);
    end
  endtask

  initial begin
    int held;
    bit held_v;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    free = 16'b0000_0000_0010_0001;   // node 0 free too, but never handed out
    req  = 16'b0000_0000_0000_0000;
    #1;
    check(id == 4'd5 && !none_free, "lowest free node other than 0");
    check(gnt == '0, "no grant without request");

    free = 16'b0000_0000_0000_0001;
    req  = 16'b0000_0000_0000_0100;
    #1;
    check(none_free && gnt == '0, "no grant when only node 0 is free");

    free = 16'b1000_0100_0000_0000;
    req  = 16'b0000_0000_0001_1000;
    #1;
    check(id == 4'd10 && gnt == 16'b0000_0000_0000_1000, "lowest requester granted lowest free");
    @(negedge clk);
    // node 10 is still marked free (its UpdateExpression has not arrived)
    req = 16'b0000_0000_0001_0000;
    #1;
    check(id == 4'd15 && gnt == 16'b0000_0000_0001_0000, "node just handed out is held back");
    @(negedge clk);
    req = '0;
    @(negedge clk);
    #1;
    check(id == 4'd10, "held node released after one cycle");

    // random patterns
    held_v = 1'b0;
    held = 0;
    for (int n = 0; n < 300; n++) begin
      int exp_id;
      bit found;
      int exp_g;
      @(negedge clk);
      free = N'($urandom);
      req  = N'($urandom) & N'($urandom);
      #1;
      found  = 1'b0;
      exp_id = 0;
      for (int i = 1; i < N; i++)
        if (!found && free[i] && !(held_v && held == i)) begin
          found = 1'b1; exp_id = i;
        end
      exp_g = -1;
      for (int i = 0; i < N; i++) if (exp_g < 0 && req[i]) exp_g = i;
      check(none_free == !found, "random: none_free");
      if (found) check(id == node_id_t'(exp_id), "random: id");
      if (found && exp_g >= 0) check(gnt == (N'(1) << exp_g), "random: grant");
      else check(gnt == '0, "random: no grant");
      held_v = found && exp_g >= 0;
      held   = exp_id;
    end

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
