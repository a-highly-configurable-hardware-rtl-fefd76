// dep_queue: dependency token queue between two execution modules.
//
// The four queues LD->CMP, CMP->LD, CMP->ST and ST->CMP carry tokens, not
// data: an instruction with a pop bit waits until its queue holds a token and
// then removes it; an instruction with a push bit inserts one. Because a
// token has no payload the queue is a counter from 0 to DEPTH. push is
// honoured only when can_push is high and pop only when has_token is high;
// a push and a pop in the same cycle leave the count unchanged. The counter
// form and the depth are this design's choices; the push/pop semantics are
// those of the accelerator's dependency mechanism.
// Interface: push/can_push on the producer side, pop/has_token on the
// consumer side, count for observation.
// Lint note: the rst_n 'synchronous and asynchronous' remark comes from the
// assertions' disable iff (!rst_n), which samples reset on the clock; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module dep_queue #(
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic push,
  output logic can_push,
  input  logic pop,
  output logic has_token,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned CW = $clog2(DEPTH+1);

  assign can_push  = (count != CW'(DEPTH));
  assign has_token = (count != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) count <= '0;
    else begin
      unique case ({push && can_push, pop && has_token})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A module must not push into a full queue or pop an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> can_push);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> has_token);

endmodule
