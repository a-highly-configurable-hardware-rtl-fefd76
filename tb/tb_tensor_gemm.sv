// tb_tensor_gemm: tensor_gemm with real scratchpads (micro-op cache, input,
// weight, accumulator). Random micro-op programs with nested loops are run
// and the accumulator and every output-buffer write are compared with a
// sequential reference model. Micro-ops are drawn from a small accumulator
// range so that back-to-back steps hit the same accumulator (forwarding
// path). Checks the initiation interval: N steps must take N + 4 cycles.
// Interface: none (self-contained). The II=1 target comes from the paper.
module tb_tensor_gemm;
  import vta_pkg::*;
  localparam int BI = 16, BO = 16, D = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fwd = 0, outw = 0;

  logic start, busy, done;
  gemm_insn_t insn;
  logic uop_rd_en, inp_rd_en, wgt_rd_en, acc_rd_en, acc_wr_en, out_wr_en;
  logic [12:0] uop_rd_idx, inp_rd_idx, wgt_rd_idx, acc_rd_idx, acc_wr_idx, out_wr_idx;
  logic [63:0] uop_rd_data;
  logic [BI*8-1:0] inp_rd_data;
  logic [BO*BI*8-1:0] wgt_rd_data;
  logic [BO*32-1:0] acc_rd_data, acc_wr_data;
  logic [BO*8-1:0] out_wr_data;
  tensor_gemm dut (.*);

  logic f0, f1, f2, f3;
  tensor_sram #(.DEPTH(D), .TBITS(64), .BLKBITS(64)) u_uop (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(uop_rd_en), .rd_idx(uop_rd_idx), .rd_data(uop_rd_data), .rd_fwd(f0));
  tensor_sram #(.DEPTH(D), .TBITS(BI*8), .BLKBITS(64)) u_inp (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(inp_rd_en), .rd_idx(inp_rd_idx), .rd_data(inp_rd_data), .rd_fwd(f1));
  tensor_sram #(.DEPTH(D), .TBITS(BO*BI*8), .BLKBITS(64)) u_wgt (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(wgt_rd_en), .rd_idx(wgt_rd_idx), .rd_data(wgt_rd_data), .rd_fwd(f2));
  tensor_sram #(.DEPTH(D), .TBITS(BO*32), .BLKBITS(64)) u_acc (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(acc_wr_en), .fw_idx(acc_wr_idx), .fw_data(acc_wr_data), .rd_en(acc_rd_en), .rd_idx(acc_rd_idx), .rd_data(acc_rd_data), .rd_fwd(f3));

  // reference state
  logic signed [7:0]  inp_m [64][BI];
  logic signed [7:0]  wgt_m [64][BO][BI];
  logic signed [31:0] acc_m [64][BO];
  logic [63:0] uops [64];

  always @(posedge clk) if (f3) fwd++;
  // output buffer writes must carry the low byte of the accumulator just written
  always @(posedge clk) if (out_wr_en) begin
    outw++;
    checks++;
    if (out_wr_idx != acc_wr_idx || !acc_wr_en) failures++;
    for (int o = 0; o < BO; o++) if (out_wr_data[o*8 +: 8] !== acc_wr_data[o*32 +: 8]) begin failures++; break; end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic model(input gemm_insn_t g);
    for (int a = 0; a < int'(g.iter_out); a++)
      for (int b = 0; b < int'(g.iter_in); b++)
        for (int u = int'(g.uop_bgn); u < int'(g.uop_end); u++) begin
          uop_t up = uop_t'(uops[u]);
          int di = int'(up.dst) + a * int'(g.dst_fo) + b * int'(g.dst_fi);
          int si = int'(up.src) + a * int'(g.src_fo) + b * int'(g.src_fi);
          int wi = int'(up.wgt) + a * int'(g.wgt_fo) + b * int'(g.wgt_fi);
          for (int o = 0; o < BO; o++) begin
            logic signed [31:0] s = 0;
            for (int i = 0; i < BI; i++) s += 32'(inp_m[si][i]) * 32'(wgt_m[wi][o][i]);
            acc_m[di][o] = g.reset ? 32'sd0 : acc_m[di][o] + s;
          end
        end
  endtask

  initial begin
    gemm_insn_t g; int n, cyc;
    start = 0; insn = '0;
    for (int k = 0; k < D; k++) begin u_uop.mem[k] = '0; u_inp.mem[k] = '0; u_wgt.mem[k] = '0; u_acc.mem[k] = '0; end
    for (int k = 0; k < 64; k++) begin
      for (int i = 0; i < BI; i++) begin inp_m[k][i] = 8'($urandom); u_inp.mem[k][i/8][(i%8)*8 +: 8] = inp_m[k][i]; end
      for (int o = 0; o < BO; o++) for (int i = 0; i < BI; i++) begin
        wgt_m[k][o][i] = 8'($urandom);
        u_wgt.mem[k][(o*BI+i)/8][((o*BI+i)%8)*8 +: 8] = wgt_m[k][o][i];
      end
      for (int o = 0; o < BO; o++) begin acc_m[k][o] = $urandom; u_acc.mem[k][o/2][(o%2)*32 +: 32] = acc_m[k][o]; end
    end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 25; t++) begin
      g = '0; g.opcode = OP_GEMM;
      g.reset = (t % 6 == 3);
      g.uop_bgn = 13'($urandom % 8);
      g.uop_end = 14'(g.uop_bgn + 1 + $urandom % 8);
      g.iter_out = 10'(1 + $urandom % 3); g.iter_in = 10'(1 + $urandom % 3);
      g.dst_fo = 11'($urandom % 3); g.dst_fi = 11'($urandom % 2);
      g.src_fo = 11'($urandom % 5); g.src_fi = 11'($urandom % 5);
      g.wgt_fo = 11'($urandom % 5); g.wgt_fi = 11'($urandom % 5);
      for (int u = 0; u < 16; u++) begin
        automatic uop_t up = '0;
        up.dst = 13'($urandom % 4); up.src = 13'($urandom % 30); up.wgt = 13'($urandom % 30);
        uops[u] = up; u_uop.mem[u] = up;
      end
      n = int'(g.iter_out) * int'(g.iter_in) * (int'(g.uop_end) - int'(g.uop_bgn));
      @(negedge clk); insn = g; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      model(g);
      checks++;
      if (cyc != n + 4) begin failures++; $display("gemm %0d steps took %0d cycles", n, cyc); end
      for (int k = 0; k < 64; k++) for (int o = 0; o < BO; o++) begin
        checks++;
        if (u_acc.mem[k][o/2][(o%2)*32 +: 32] !== acc_m[k][o]) begin
          failures++; if (failures < 5) $display("acc[%0d][%0d] mismatch t=%0d", k, o, t);
        end
      end
    end
    checks++; if (fwd == 0) begin failures++; $display("forwarding never used"); end
    $display("forwarded acc reads %0d, output writes %0d", fwd, outw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
