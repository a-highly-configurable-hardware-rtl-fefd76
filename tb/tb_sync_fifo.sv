// tb_sync_fifo: random push/pop traffic against a queue model; checks order,
// data, the full flag at DEPTH entries and the count output.
// Interface: none (self-contained). Timing: one push and one pop per cycle
// possible; checked against a queue model every cycle.
module tb_sync_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D):0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  logic [W-1:0] model[$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill to full
    for (int i = 0; i < D + 2; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = W'(i + 100);
      checks++;
      if (in_ready !== (i < D)) begin failures++; $display("full flag wrong at %0d", i); end
    end
    @(negedge clk); in_valid = 0;
    checks++; if (count != D) begin failures++; $display("count %0d", count); end
    // random traffic
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== (model.size() != 0)) begin failures++; $display("out_valid wrong"); end
      if (out_valid && out_data !== model[0]) begin failures++; $display("data %h exp %h", out_data, model[0]); end
      checks++;
      if (count != model.size()) begin failures++; $display("count wrong"); end
      in_valid  = ($urandom % 2);
      out_ready = ($urandom % 3) != 0;
      in_data   = W'($urandom);
      @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model update at the clock edge
  always @(posedge clk) if (rst_n) begin
    automatic bit push = in_valid && in_ready;
    automatic bit pop  = out_valid && out_ready;
    automatic logic [W-1:0] d = in_data;
    if (pop) void'(model.pop_front());
    if (push) model.push_back(d);
  end
endmodule
