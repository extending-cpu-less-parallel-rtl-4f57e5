// tb_depth_adder: exhaustive test of the list-depth incrementer.
//
// For every right pointer class (NULL or not) and every value arriving from
// the right child, checks the node's depth (0 at the tail, else the child's
// value) and the depth + 1 sent upward, wrapping at 2**ID_W.
module tb_depth_adder;
  import lambda_pkg::*;

  node_id_t crp, up, depth, depth_up;
  int checks = 0, failures = 0;

  depth_adder dut (
    .crp_i      (crp),
    .child_up_i (up),
    .depth_o    (depth),
    .depth_up_o (depth_up)
  );

  initial begin
    for (int p = 0; p < 16; p++) begin
      for (int u = 0; u < 16; u++) begin
        int exp_depth;
        crp = node_id_t'(p);
        up  = node_id_t'(u);
        #1;
        exp_depth = (p == 0) ? 0 : u;
        checks++;
        if (depth != node_id_t'(exp_depth) || depth_up != node_id_t'((exp_depth + 1) % 16)) begin
          failures++;
          $display("FAIL crp=%0d up=%0d: depth %0d up %0d", p, u, depth, depth_up);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("FAIL watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
