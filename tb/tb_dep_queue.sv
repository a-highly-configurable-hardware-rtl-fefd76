// tb_dep_queue: token counting, full (can_push low at DEPTH), empty
// (has_token low at zero), and simultaneous push and pop.
// Interface: none (self-contained). Timing: token count visible one cycle
// after push/pop; checked every cycle.
module tb_dep_queue;
  localparam int D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic push, can_push, pop, has_token;
  logic [$clog2(D+1)-1:0] count;
  dep_queue #(.DEPTH(D)) dut (.*);
  int model = 0;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (count=%0d model=%0d)", m, count, model); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk);
    chk(!has_token && can_push, "empty after reset");
    for (int i = 0; i < D; i++) begin push = 1; @(negedge clk); model++; end
    push = 0;
    chk(!can_push && has_token && count == D, "full at DEPTH");
    pop = 1; @(negedge clk);   // pop from a full queue
    push = 0; pop = 0;
    chk(count == D - 1 && can_push, "pop at full");
    model = count;
    for (int c = 0; c < 1000; c++) begin
      push = can_push && ($urandom % 2);
      pop  = has_token && ($urandom % 2);
      @(negedge clk);
      model += int'(push) - int'(pop);
      chk(count == model, "count tracks push/pop");
      chk(has_token == (model != 0), "has_token");
      chk(can_push == (model != D), "can_push");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
