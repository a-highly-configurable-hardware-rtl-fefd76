// tb_store_module: runs the store harness with a 64-bit bus (narrow mode,
// two beats per 128-bit output tensor, bursts per row chunk) and a 256-bit
// bus (wide mode, one strobed beat per tensor). See st_harness for checks.
// Interface: none (self-contained). Timing: 100,000-cycle watchdog.
module tb_store_module;
  logic clk = 0;
  always #5 clk = ~clk;
  int c0, f0, c1, f1, checks, failures;
  logic d0, d1;
  st_harness #(.BUS(64),  .SEED(5)) h_narrow (.clk, .checks(c0), .failures(f0), .fin(d0));
  st_harness #(.BUS(256), .SEED(6)) h_wide   (.clk, .checks(c1), .failures(f1), .fin(d1));
  initial begin
    fork
      begin @(posedge clk); wait (d0 && d1); end
      begin repeat (100000) @(posedge clk); $display("watchdog"); end
    join_any
    checks = c0 + c1 + 1;
    failures = f0 + f1 + ((d0 && d1) ? 0 : 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
