// cluster_alu: the ALU shared by every node of a cluster, with its request
// stack.
//
// A node that needs arithmetic presents {its ID, opcode, operand 1,
// operand 2} on req_i and raises req_valid_i (the "s0" select of the shift
// registers). On that clock edge every stack register shifts down by one
// and the top register takes the new request. On an edge with no new
// request and a pending request on top, the ALU evaluates the top entry,
// the result is registered onto rsp_o together with the requester's ID and
// rsp_o.valid (the ALU "status" output) is high for that one cycle, and the
// stack shifts up so the next pending request reaches the top. Requests are
// therefore served last-in first-out, and a new request always wins over
// processing.
//
// Timing: a request accepted at edge t is answered at edge t+1 at the
// earliest (rsp_o.valid seen after that edge), and later if further
// requests keep arriving.
//
// Follows the paper: the stack of shift registers holding ID, opcode and two
// operands; push on the request bit; process the top only when no request
// arrived; the status output both returns the result to the node named by
// the ID field and shifts the stack up; a Clear input. This design's own
// choices: DEPTH defaults to one entry per node of the cluster (the figure
// draws three and an ellipsis), the ALU is combinational so it completes in
// the cycle it is started, results are truncated to VAL_W bits, and a push
// into a full stack drops the bottom entry (flagged by overflow_o and an
// assertion).
module cluster_alu
  import lambda_pkg::*;
#(
  parameter int unsigned DEPTH = STACK_DEPTH
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear_i,      // synchronous clear of every stack register
  input  logic     req_valid_i,  // s0: push req_i this cycle
  input  alu_req_t req_i,        // D
  output alu_rsp_t rsp_o,        // status, ID and Q
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic     overflow_o    // a push found the stack full
);

  alu_req_t stack_q [DEPTH];
  logic     valid_q [DEPTH];

  // The ALU itself.
  function automatic value_t alu(alu_req_t r);
    unique case (r.op)
      ALU_ADD: return r.a + r.b;
      ALU_MUL: return VAL_W'(r.a * r.b);
      ALU_GTZ: return value_t'($signed(r.a) > 0);
      ALU_LTZ: return value_t'($signed(r.a) < 0);
      ALU_EQZ: return value_t'(r.a == '0);
      default: return '0;
    endcase
  endfunction

  logic do_alu;
  assign do_alu = !req_valid_i && valid_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        stack_q[i] <= '0;
        valid_q[i] <= 1'b0;
      end
      rsp_o      <= '0;
      overflow_o <= 1'b0;
    end else if (clear_i) begin
      for (int i = 0; i < DEPTH; i++) begin
        stack_q[i] <= '0;
        valid_q[i] <= 1'b0;
      end
      rsp_o      <= '0;
      overflow_o <= 1'b0;
    end else begin
      rsp_o      <= '0;
      overflow_o <= 1'b0;
      if (req_valid_i) begin
        // shift down, new request on top
        stack_q[0] <= req_i;
        valid_q[0] <= 1'b1;
        for (int i = 1; i < DEPTH; i++) begin
          stack_q[i] <= stack_q[i-1];
          valid_q[i] <= valid_q[i-1];
        end
        overflow_o <= valid_q[DEPTH-1];
      end else if (do_alu) begin
        rsp_o.valid <= 1'b1;
        rsp_o.id    <= stack_q[0].id;
        rsp_o.q     <= alu(stack_q[0]);
        // shift up, next pending request to the top
        for (int i = 0; i < DEPTH - 1; i++) begin
          stack_q[i] <= stack_q[i+1];
          valid_q[i] <= valid_q[i+1];
        end
        stack_q[DEPTH-1] <= '0;
        valid_q[DEPTH-1] <= 1'b0;
      end
    end
  end

  always_comb begin
    count_o = '0;
    for (int i = 0; i < DEPTH; i++) count_o += $bits(count_o)'(valid_q[i]);
  end

  // The stack is sized so that every node can have one request waiting.
  a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
    !(req_valid_i && valid_q[DEPTH-1]))
    else $error("cluster_alu: request pushed into a full stack");

endmodule
