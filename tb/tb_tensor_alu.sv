// tb_tensor_alu: tensor_alu with a micro-op cache and accumulator scratchpad.
// Runs every operation (MIN, MAX, ADD, SHR, MUL, CLIP) with an immediate and
// with a register operand, plus reset, over random micro-op loops, and
// compares the accumulator and every output-buffer write against a
// sequential reference model. Checks the rates: N immediate steps take
// N + 3 cycles (II = 1), N register-operand steps take 2N + 3 (II = 2);
// a reset needs no read and also runs at II = 1.
// Interface: none (self-contained). The II values come from the paper.
module tb_tensor_alu;
  import vta_pkg::*;
  localparam int BO = 16, D = 8192;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fwd = 0;
  int seen_op [8];

  logic start, busy, done;
  alu_insn_t insn;
  logic uop_rd_en, acc_rd_en, acc_wr_en, out_wr_en;
  logic [12:0] uop_rd_idx, acc_rd_idx, acc_wr_idx, out_wr_idx;
  logic [63:0] uop_rd_data;
  logic [BO*32-1:0] acc_rd_data, acc_wr_data;
  logic [BO*8-1:0] out_wr_data;
  tensor_alu dut (.*);

  logic f0, f3;
  tensor_sram #(.DEPTH(D), .TBITS(64), .BLKBITS(64)) u_uop (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(uop_rd_en), .rd_idx(uop_rd_idx), .rd_data(uop_rd_data), .rd_fwd(f0));
  tensor_sram #(.DEPTH(D), .TBITS(BO*32), .BLKBITS(64)) u_acc (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(acc_wr_en), .fw_idx(acc_wr_idx), .fw_data(acc_wr_data), .rd_en(acc_rd_en), .rd_idx(acc_rd_idx), .rd_data(acc_rd_data), .rd_fwd(f3));

  logic signed [31:0] acc_m [64][BO];
  logic [63:0] uops [64];

  always @(posedge clk) if (f3) fwd++;
  always @(posedge clk) if (out_wr_en) begin
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

  function automatic logic signed [31:0] ref_op(alu_op_t op, logic signed [31:0] a, logic signed [31:0] b);
    case (op)
      ALU_MIN:  return a < b ? a : b;
      ALU_MAX:  return a > b ? a : b;
      ALU_ADD:  return a + b;
      ALU_SHR:  return b >= 0 ? a >>> b[4:0] : a << ((-b) & 31);
      ALU_MUL:  begin
        logic signed [7:0] x = a[7:0], y = b[7:0];
        return 32'(x) * 32'(y);
      end
      ALU_CLIP: return a > b ? b : (a < -b ? -b : a);
      default:  return a;
    endcase
  endfunction

  task automatic model(input alu_insn_t g);
    for (int a = 0; a < int'(g.iter_out); a++)
      for (int b = 0; b < int'(g.iter_in); b++)
        for (int u = int'(g.uop_bgn); u < int'(g.uop_end); u++) begin
          uop_t up = uop_t'(uops[u]);
          int di = int'(up.dst) + a * int'(g.dst_fo) + b * int'(g.dst_fi);
          int si = int'(up.src) + a * int'(g.src_fo) + b * int'(g.src_fi);
          for (int o = 0; o < BO; o++)
            acc_m[di][o] = g.reset ? 32'sd0 :
              ref_op(g.alu_op, acc_m[di][o], g.use_imm ? 32'(signed'(g.imm)) : acc_m[si][o]);
        end
  endtask

  initial begin
    alu_insn_t g; int n, cyc;
    start = 0; insn = '0;
    for (int k = 0; k < D; k++) begin u_uop.mem[k] = '0; u_acc.mem[k] = '0; end
    for (int k = 0; k < 64; k++)
      for (int o = 0; o < BO; o++) begin
        acc_m[k][o] = 32'($signed($urandom % 2001) - 1000);
        u_acc.mem[k][o/2][(o%2)*32 +: 32] = acc_m[k][o];
      end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 48; t++) begin
      g = '0; g.opcode = OP_ALU;
      g.alu_op = alu_op_t'(t % 6);
      g.use_imm = (t / 6) % 2 == 0;
      g.reset = (t == 47);
      g.imm = 16'($signed($urandom % 41) - 20);
      if (g.alu_op == ALU_SHR && !g.use_imm) g.imm = 0;
      if (g.alu_op == ALU_CLIP) g.imm = 16'(10 + $urandom % 200);
      g.uop_bgn = 13'($urandom % 8);
      g.uop_end = 14'(g.uop_bgn + 1 + $urandom % 6);
      g.iter_out = 10'(1 + $urandom % 3); g.iter_in = 10'(1 + $urandom % 3);
      g.dst_fo = 11'($urandom % 3); g.dst_fi = 11'($urandom % 2);
      g.src_fo = 11'($urandom % 5); g.src_fi = 11'($urandom % 5);
      for (int u = 0; u < 16; u++) begin
        automatic uop_t up = '0;
        up.dst = 13'($urandom % 6); up.src = 13'($urandom % 30);
        uops[u] = up; u_uop.mem[u] = up;
      end
      // keep register-operand shifts and clips meaningful
      if (!g.use_imm && (g.alu_op == ALU_SHR || g.alu_op == ALU_CLIP))
        for (int k = 6; k < 64; k++) for (int o = 0; o < BO; o++) begin
          acc_m[k][o] = (g.alu_op == ALU_SHR) ? 32'($signed($urandom % 9) - 4) : 32'(50 + $urandom % 100);
          u_acc.mem[k][o/2][(o%2)*32 +: 32] = acc_m[k][o];
        end
      n = int'(g.iter_out) * int'(g.iter_in) * (int'(g.uop_end) - int'(g.uop_bgn));
      @(negedge clk); insn = g; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      @(negedge clk);
      model(g);
      seen_op[t % 6]++;
      checks++;
      if (cyc != ((g.use_imm || g.reset) ? n + 3 : 2 * n + 3)) begin
        failures++; $display("alu op %0d imm %0d: %0d steps took %0d cycles", g.alu_op, g.use_imm, n, cyc);
      end
      for (int k = 0; k < 64; k++) for (int o = 0; o < BO; o++) begin
        checks++;
        if (u_acc.mem[k][o/2][(o%2)*32 +: 32] !== acc_m[k][o]) begin
          failures++; if (failures < 5) $display("acc[%0d][%0d] mismatch t=%0d op %0d", k, o, t, g.alu_op);
        end
      end
      // renormalise destination values so later ops stay in range
      for (int k = 0; k < 6; k++) for (int o = 0; o < BO; o++) begin
        acc_m[k][o] = 32'($signed($urandom % 2001) - 1000);
        u_acc.mem[k][o/2][(o%2)*32 +: 32] = acc_m[k][o];
      end
    end
    checks++; if (fwd == 0) begin failures++; $display("forwarding never used"); end
    $display("forwarded acc reads %0d", fwd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
