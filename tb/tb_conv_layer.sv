// tb_conv_layer: a convolution layer of the kind found in ResNet, run end to
// end on the accelerator at its default configuration (16x16 GEMM, 8192-entry
// scratchpads, 64-bit bus). The layer is a 3x3, stride-1, pad-1 convolution
// with CIB*16 input and COB*16 output channels on an H x H feature map,
// followed by requantisation (arithmetic shift right), ReLU (MAX with 0) and
// clipping to 8 bits, as a compiler would lower it:
//   - one LOAD per input-channel block, with 1 tensor of zero padding on every
//     side, so the scratchpad holds (H+2) x (H+2) tensors per block;
//   - one LOAD of all COB*CIB*9 weight tensors, one LOAD of the micro-ops;
//   - a GEMM reset of the accumulators, then one GEMM whose micro-op loop
//     walks (x, input block, ky, kx) for one output row while the two affine
//     loops walk the output block (iter_out) and the row (iter_in);
//   - ALU SHR, MAX and CLIP with immediates, a STORE, and FINISH.
// The result is compared byte for byte with a direct convolution computed
// from the DRAM contents, independent of the instruction semantics. The GEMM
// must run at one step per cycle (N steps in N + 4 cycles). The layer sizes
// are localparams; other layer shapes only change them.
// Interface: none (self-contained).
module tb_conv_layer;
  import vta_pkg::*;
  localparam int BI = 16, BO = 16;
  localparam int H = 6, CIB = 2, COB = 2, SHIFT = 11;
  localparam int HP = H + 2;
  localparam int NUOP = H * CIB * 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, done; logic [31:0] insn_addr, insn_count, cycles;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [63:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [63:0] w_data; logic [7:0] w_strb;

  vta_top dut (
    .clk, .rst_n, .start, .insn_addr, .insn_count, .done, .cycles,
    .mem_ar_valid(ar_valid), .mem_ar_ready(ar_ready), .mem_ar_addr(ar_addr), .mem_ar_len(ar_len),
    .mem_ar_id(ar_id), .mem_r_valid(r_valid), .mem_r_ready(r_ready), .mem_r_data(r_data),
    .mem_r_id(r_id), .mem_r_last(r_last),
    .mem_aw_valid(aw_valid), .mem_aw_ready(aw_ready), .mem_aw_addr(aw_addr), .mem_aw_len(aw_len),
    .mem_w_valid(w_valid), .mem_w_ready(w_ready), .mem_w_data(w_data), .mem_w_strb(w_strb),
    .mem_w_last(w_last), .mem_b_valid(b_valid), .mem_b_ready(b_ready));
  dram_model #(.BUS_BITS(64), .TW(3), .WORDS(65536), .LAT(6), .MAX_OUT(8)) u_mem (.*);

  // DRAM layout (bytes)
  localparam int INSN_B = 'h0000, UOP_B = 'h1000, WGT_B = 'h4000, INP_B = 'h10000, OUT_B = 'h18000;

  // GEMM rate: N steps in N + 4 cycles
  int cyc = 0, gemm_t0 = 0, gemm_n = 0, gemm_steps = 0, gemm_checks = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_compute.u_gemm.start && !dut.u_compute.u_gemm.busy) begin gemm_t0 = cyc; gemm_n = 0; end
    if (dut.u_compute.u_gemm.acc_wr_en) gemm_n++;
    if (dut.u_compute.u_gemm.acc_wr_en && !dut.u_compute.u_gemm.s3_rst) gemm_steps++;
    if (dut.u_compute.u_gemm.done) begin
      checks++; gemm_checks++;
      if (cyc - gemm_t0 != gemm_n + 4) begin
        failures++; $display("GEMM of %0d steps took %0d cycles", gemm_n, cyc - gemm_t0);
      end
    end
  end

  logic [127:0] prog [16];
  int np = 0;

  function automatic dep_t dp(bit pp, bit pn, bit up, bit un);
    dep_t d; d.pop_prev = pp; d.pop_next = pn; d.push_prev = up; d.push_next = un; return d;
  endfunction
  function automatic mem_insn_t mi(opcode_t op, mem_type_t mt, int sb, int db, int xs, int ys, int xst,
                                   int pad, dep_t d);
    mem_insn_t m = '0;
    m.opcode = op; m.mem_type = mt; m.dep = d; m.sram_base = 13'(sb); m.dram_base = 32'(db);
    m.x_size = 16'(xs); m.y_size = 16'(ys); m.x_stride = 16'(xst);
    m.x_pad_0 = 4'(pad); m.x_pad_1 = 4'(pad); m.y_pad_0 = 4'(pad); m.y_pad_1 = 4'(pad);
    return m;
  endfunction
  function automatic gemm_insn_t gm(bit rst, int ub, int ue, int io, int ii, int dfo, int dfi,
                                    int sfo, int sfi, int wfo, int wfi, dep_t d);
    gemm_insn_t g = '0;
    g.opcode = OP_GEMM; g.dep = d; g.reset = rst; g.uop_bgn = 13'(ub); g.uop_end = 14'(ue);
    g.iter_out = 10'(io); g.iter_in = 10'(ii); g.dst_fo = 11'(dfo); g.dst_fi = 11'(dfi);
    g.src_fo = 11'(sfo); g.src_fi = 11'(sfi); g.wgt_fo = 11'(wfo); g.wgt_fi = 11'(wfi); return g;
  endfunction
  // element-wise over all COB*H*H accumulators, using the identity micro-op
  function automatic alu_insn_t al(alu_op_t op, int imm, dep_t d);
    alu_insn_t a = '0;
    a.opcode = OP_ALU; a.dep = d; a.alu_op = op; a.use_imm = 1'b1; a.imm = 16'(imm);
    a.uop_bgn = 13'(NUOP); a.uop_end = 14'(NUOP + 1);
    a.iter_out = 10'(COB); a.iter_in = 10'(H * H); a.dst_fo = 11'(H * H); a.src_fo = 11'(H * H);
    a.dst_fi = 11'd1; a.src_fi = 11'd1;
    return a;
  endfunction

  function automatic byte unsigned rb(int a); return u_mem.read_byte(a); endfunction
  function automatic logic signed [7:0] inp(int ci, int y, int x);   // unpadded coordinates
    if (y < 0 || y >= H || x < 0 || x >= H) return 8'sd0;
    return signed'(rb(INP_B + ((ci / BI) * H * H + y * H + x) * BI + ci % BI));
  endfunction
  function automatic logic signed [7:0] wgt(int co, int ci, int ky, int kx);
    int t = ((co / BO) * CIB + ci / BI) * 9 + ky * 3 + kx;
    return signed'(rb(WGT_B + t * BI * BO + (co % BO) * BI + ci % BI));
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mem_insn_t fin; uop_t u; int n;
    start = 0; insn_addr = 0; insn_count = 0;
    for (int k = 0; k < 65536; k++) u_mem.mem[k] = {$urandom, $urandom};
    // micro-ops: one output row, loop order x, input block, ky, kx
    n = 0;
    for (int x = 0; x < H; x++) for (int cb = 0; cb < CIB; cb++)
      for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
        u = '0; u.dst = IDX_W'(x); u.src = IDX_W'(cb * HP * HP + ky * HP + x + kx);
        u.wgt = IDX_W'(cb * 9 + ky * 3 + kx);
        for (int b = 0; b < 8; b++) u_mem.write_byte(UOP_B + n * 8 + b, u[b*8 +: 8]);
        n++;
      end
    u = '0;   // identity micro-op for the ALU
    for (int b = 0; b < 8; b++) u_mem.write_byte(UOP_B + n * 8 + b, u[b*8 +: 8]);

    for (int cb = 0; cb < CIB; cb++)
      emit(mi(OP_LOAD, MEM_INP, cb * HP * HP, INP_B / BI + cb * H * H, H, H, H, 1, dp(0, 0, 0, 0)));
    emit(mi(OP_LOAD, MEM_WGT, 0, WGT_B / (BI * BO), COB * CIB * 9, 1, COB * CIB * 9, 0, dp(0, 0, 0, 1)));
    emit(mi(OP_LOAD, MEM_UOP, 0, UOP_B / 8, NUOP + 1, 1, NUOP + 1, 0, dp(0, 0, 0, 0)));
    emit(gm(1, NUOP, NUOP + 1, COB, H * H, H * H, 1, 0, 0, 0, 0, dp(0, 0, 0, 0)));
    emit(gm(0, 0, NUOP, COB, H, H * H, H, 0, HP, CIB * 9, 0, dp(1, 0, 0, 0)));
    emit(al(ALU_SHR, SHIFT, dp(0, 0, 0, 0)));
    emit(al(ALU_MAX, 0, dp(0, 0, 0, 0)));
    emit(al(ALU_CLIP, 127, dp(0, 0, 0, 1)));
    emit(mi(OP_STORE, MEM_OUT, 0, OUT_B / BO, COB * H * H, 1, COB * H * H, 0, dp(1, 0, 1, 0)));
    fin = '0; fin.opcode = OP_FINISH; fin.dep = dp(0, 1, 0, 0);
    emit(fin);
    for (int i = 0; i < np; i++) for (int b = 0; b < 16; b++) u_mem.write_byte(INSN_B + i * 16 + b, prog[i][b*8 +: 8]);

    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    insn_addr = INSN_B; insn_count = np; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (5) @(negedge clk);
    $display("conv %0dx%0d, %0d->%0d channels: %0d instructions, %0d GEMM steps, %0d cycles",
             H, H, CIB * BI, COB * BO, np, gemm_steps, cycles);

    for (int co = 0; co < COB * BO; co++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      automatic logic signed [31:0] s = 0;
      automatic logic [7:0] exp, got;
      for (int ci = 0; ci < CIB * BI; ci++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
        s += 32'(inp(ci, y + ky - 1, x + kx - 1)) * 32'(wgt(co, ci, ky, kx));
      s = s >>> SHIFT;
      if (s < 0) s = 0;
      if (s > 127) s = 127;
      exp = s[7:0];
      got = rb(OUT_B + ((co / BO) * H * H + y * H + x) * BO + co % BO);
      checks++;
      if (got !== exp) begin
        failures++; if (failures < 8) $display("out[%0d][%0d][%0d]: got %0d expected %0d", co, y, x, got, exp);
      end
    end
    checks++; if (gemm_steps != COB * H * NUOP) begin failures++; $display("GEMM steps %0d", gemm_steps); end
    checks++; if (gemm_checks != 2) begin failures++; $display("GEMM rate checked %0d times", gemm_checks); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic emit(logic [127:0] i);
    prog[np++] = i;
  endtask
endmodule
