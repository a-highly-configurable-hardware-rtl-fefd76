// tb_tensor_load: runs the tensor_load harness in three shapes:
//   input buffer  128-bit tensors on a 64-bit bus (narrow, 2 beats/tensor),
//   weight buffer 2048-bit tensors on a 64-bit bus (narrow, 32 beats/tensor),
//   32-bit tensors on a 256-bit bus (wide, 8 tensors per beat, masked lanes).
// Each harness compares every scratchpad tensor (data and padding) against a
// reference from the DRAM contents and checks the padding-only rate.
// Interface: none (self-contained). Timing: padding-only loads must write
// one tensor per cycle (checked in the harness).
module tb_tensor_load;
  logic clk = 0;
  always #5 clk = ~clk;
  int c0, f0, y0, c1, f1, y1, c2, f2, y2;
  logic d0, d1, d2;
  tl_harness #(.TBITS(128),  .BUS(64),  .SEED(1)) h_inp (.clk, .checks(c0), .failures(f0), .yields(y0), .fin(d0));
  tl_harness #(.TBITS(2048), .BUS(64),  .SEED(2), .NINSN(6)) h_wgt (.clk, .checks(c1), .failures(f1), .yields(y1), .fin(d1));
  tl_harness #(.TBITS(32),   .BUS(256), .ELEM(32), .SEED(3)) h_wide (.clk, .checks(c2), .failures(f2), .yields(y2), .fin(d2));
  int checks, failures;
  initial begin
    fork
      begin @(posedge clk); wait (d0 && d1 && d2); end
      begin repeat (400000) @(posedge clk); $display("watchdog"); end
    join_any
    checks = c0 + c1 + c2 + 1;
    failures = f0 + f1 + f2 + ((d0 && d1 && d2) ? 0 : 1);
    // padding must have yielded to data at least once somewhere
    if (y0 + y1 + y2 == 0) begin failures++; $display("pad filler never yielded"); end
    $display("pad yields %0d %0d %0d", y0, y1, y2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
