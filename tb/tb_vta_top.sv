// tb_vta_top: end-to-end test of the accelerator at its default (full)
// configuration: BATCH 1, 16x16 GEMM, 8192-entry scratchpads, 64-bit bus.
//
// A two-round program (a padded convolution-like tile GEMM followed by a
// chain of ALU operations, stored to DRAM, then a second tile with
// max-pool style padding that reuses the buffers under dependency tokens,
// then FINISH) is written into a behavioural DRAM that returns bursts out of
// order. The testbench runs the same instruction stream through a
// sequential instruction-level reference model and compares both output
// regions in DRAM byte for byte.
//
// Every mechanism of the design is counted and a failure is recorded for any
// that never happened: routing to each command queue, pushes on all four
// dependency queues, a module stalled on a missing token, micro-op and
// accumulator loads, GEMM and GEMM reset steps, every ALU operation, ALU with
// immediate and with register operand, accumulator forwarding, zero and
// most-negative padding, the padding filler yielding to data, out-of-order
// read completion, several reads in flight, store bursts and FINISH.
// The GEMM initiation interval is also checked in place: each GEMM
// instruction of N steps must take N + 4 cycles.
// Interface: none (self-contained).
module tb_vta_top;
  import vta_pkg::*;
  localparam int BI = 16, BO = 16;
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

  // ---------------- DRAM layout (bytes) ----------------
  localparam int INSN_B = 'h0000, UOP_B = 'h1000, WGT_B = 'h2000, INP_B = 'h4000,
                 ACC_B = 'h8000, OUT1_B = 'h10000, OUT2_B = 'h12000;

  // ---------------- mechanism counters ----------------
  localparam int NM = 24;
  int mc [NM];
  string mname [NM] = '{"route_load", "route_compute", "route_store", "push_ld2cmp", "push_cmp2ld",
    "push_cmp2st", "push_st2cmp", "token_stall", "uop_load_beat", "acc_load_beat", "gemm_step",
    "gemm_reset_step", "alu_imm_step", "alu_reg_step", "acc_forward", "pad_zero", "pad_min",
    "pad_yield", "vme_reorder", "multi_inflight", "store_burst", "finish", "alu_ops_all", "wgt_load_beat"};
  logic [7:0] ops_seen = '0;
  int gemm_t0, gemm_n, gemm_ii_checks = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ldq.in_valid && dut.u_ldq.in_ready) mc[0]++;
    if (dut.u_cmpq.in_valid && dut.u_cmpq.in_ready) mc[1]++;
    if (dut.u_stq.in_valid && dut.u_stq.in_ready) mc[2]++;
    if (dut.u_ld2cmp.push) mc[3]++;
    if (dut.u_cmp2ld.push) mc[4]++;
    if (dut.u_cmp2st.push) mc[5]++;
    if (dut.u_st2cmp.push) mc[6]++;
    if ((dut.u_compute.st == 2'd1 && !dut.u_compute.pops_ok) ||
        (dut.u_store.st == 3'd1 && dut.u_store.ins.dep.pop_prev && !dut.u_store.cmp2st_has) ||
        (dut.u_load.st == 2'd1 && dut.u_load.ins.dep.pop_next && !dut.u_load.cmp2ld_has)) mc[7]++;
    if (dut.rd_valid[1]) mc[8]++;
    if (dut.rd_valid[4]) mc[9]++;
    if (dut.u_compute.u_gemm.acc_wr_en && !dut.u_compute.u_gemm.s3_rst) mc[10]++;
    if (dut.u_compute.u_gemm.acc_wr_en && dut.u_compute.u_gemm.s3_rst) mc[11]++;
    if (dut.u_compute.u_alu.acc_wr_en && !dut.u_compute.u_alu.two) mc[12]++;
    if (dut.u_compute.u_alu.acc_wr_en && dut.u_compute.u_alu.two) mc[13]++;
    if (dut.acc_fwd) mc[14]++;
    if (dut.u_load.u_inp.pad_wr && !dut.u_load.u_inp.ins.pad_sel) mc[15]++;
    if (dut.u_load.u_inp.pad_wr && dut.u_load.u_inp.ins.pad_sel) mc[16]++;
    if (dut.load_pad_yield != 0) mc[17]++;
    if (dut.vme_inflight >= 2) mc[19]++;
    if (b_valid && b_ready) mc[20]++;
    if (dut.finish) mc[21]++;
    if (dut.rd_valid[3]) mc[23]++;
    if (dut.u_compute.u_alu.start && !dut.u_compute.u_alu.busy) ops_seen[dut.u_compute.u_alu.insn.alu_op] = 1'b1;
    // GEMM initiation interval: N steps in N + 4 cycles
    if (dut.u_compute.u_gemm.start && !dut.u_compute.u_gemm.busy) begin gemm_t0 = cyc; gemm_n = 0; end
    if (dut.u_compute.u_gemm.acc_wr_en) gemm_n++;
    if (dut.u_compute.u_gemm.done) begin
      checks++; gemm_ii_checks++;
      if (cyc - gemm_t0 != gemm_n + 4) begin
        failures++; $display("GEMM of %0d steps took %0d cycles", gemm_n, cyc - gemm_t0);
      end
    end
  end

  // ---------------- program construction ----------------
  logic [127:0] prog [64];
  int np = 0;
  uop_t uops [8];

  function automatic dep_t dp(bit pp, bit pn, bit up, bit un);
    dep_t d; d.pop_prev = pp; d.pop_next = pn; d.push_prev = up; d.push_next = un; return d;
  endfunction
  function automatic mem_insn_t ld(mem_type_t mt, int sb, int db, int xs, int ys, int xst,
                                   int xp0, int xp1, int yp0, int yp1, bit ps, dep_t d);
    mem_insn_t m = '0;
    m.opcode = OP_LOAD; m.mem_type = mt; m.dep = d; m.sram_base = 13'(sb); m.dram_base = 32'(db);
    m.x_size = 16'(xs); m.y_size = 16'(ys); m.x_stride = 16'(xst);
    m.x_pad_0 = 4'(xp0); m.x_pad_1 = 4'(xp1); m.y_pad_0 = 4'(yp0); m.y_pad_1 = 4'(yp1);
    m.pad_sel = 4'(ps); return m;
  endfunction
  function automatic gemm_insn_t gm(bit rst, int ub, int ue, int io, int ii, int dfo, int dfi,
                                    int sfo, int sfi, int wfo, int wfi, dep_t d);
    gemm_insn_t g = '0;
    g.opcode = OP_GEMM; g.dep = d; g.reset = rst; g.uop_bgn = 13'(ub); g.uop_end = 14'(ue);
    g.iter_out = 10'(io); g.iter_in = 10'(ii); g.dst_fo = 11'(dfo); g.dst_fi = 11'(dfi);
    g.src_fo = 11'(sfo); g.src_fi = 11'(sfi); g.wgt_fo = 11'(wfo); g.wgt_fi = 11'(wfi); return g;
  endfunction
  function automatic alu_insn_t al(alu_op_t op, bit ui, int imm, int ub, dep_t d);
    alu_insn_t a = '0;
    a.opcode = OP_ALU; a.dep = d; a.alu_op = op; a.use_imm = ui; a.imm = 16'(imm);
    a.uop_bgn = 13'(ub); a.uop_end = 14'(ub + 1);
    a.iter_out = 10'd4; a.iter_in = 10'd6; a.dst_fo = 11'd6; a.src_fo = 11'd6; a.dst_fi = 11'd1; a.src_fi = 11'd1;
    return a;
  endfunction

  // ---------------- reference model ----------------
  logic signed [7:0]  inp_m [8192][BI];
  logic signed [7:0]  wgt_m [64][BO][BI];
  logic signed [31:0] acc_m [64][BO];
  logic [7:0]         out_m [64][BO];
  logic [63:0]        uop_m [64];
  byte unsigned       dram_m [int];   // expected bytes of the output regions

  function automatic byte unsigned rb(int a); return u_mem.read_byte(a); endfunction

  task automatic m_load(mem_insn_t m);
    int w = int'(m.x_pad_0) + int'(m.x_size) + int'(m.x_pad_1);
    int h = int'(m.y_pad_0) + int'(m.y_size) + int'(m.y_pad_1);
    for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) begin
      int ry = r - int'(m.y_pad_0), cx = c - int'(m.x_pad_0);
      bit dat = ry >= 0 && ry < int'(m.y_size) && cx >= 0 && cx < int'(m.x_size);
      int t = int'(m.dram_base) + ry * int'(m.x_stride) + cx;
      int s = int'(m.sram_base) + r * w + c;
      case (m.mem_type)
        MEM_INP: for (int i = 0; i < BI; i++) inp_m[s][i] = dat ? rb(t * BI + i) : (m.pad_sel ? 8'h80 : 8'h00);
        MEM_WGT: for (int o = 0; o < BO; o++) for (int i = 0; i < BI; i++)
                   wgt_m[s][o][i] = dat ? rb(t * BI * BO + o * BI + i) : 8'h00;
        MEM_ACC: for (int o = 0; o < BO; o++)
                   acc_m[s][o] = dat ? {rb(t*64+o*4+3), rb(t*64+o*4+2), rb(t*64+o*4+1), rb(t*64+o*4)} : 32'sd0;
        MEM_UOP: for (int b = 0; b < 8; b++) uop_m[s][b*8 +: 8] = dat ? rb(t * 8 + b) : 8'h00;
        default: ;
      endcase
    end
  endtask

  task automatic m_gemm(gemm_insn_t g);
    for (int a = 0; a < int'(g.iter_out); a++) for (int b = 0; b < int'(g.iter_in); b++)
      for (int u = int'(g.uop_bgn); u < int'(g.uop_end); u++) begin
        uop_t up = uop_t'(uop_m[u]);
        int di = int'(up.dst) + a * int'(g.dst_fo) + b * int'(g.dst_fi);
        int si = int'(up.src) + a * int'(g.src_fo) + b * int'(g.src_fi);
        int wi = int'(up.wgt) + a * int'(g.wgt_fo) + b * int'(g.wgt_fi);
        for (int o = 0; o < BO; o++) begin
          logic signed [31:0] s = 0;
          if (!g.reset) for (int i = 0; i < BI; i++) s += 32'(inp_m[si][i]) * 32'(wgt_m[wi][o][i]);
          acc_m[di][o] = g.reset ? 32'sd0 : acc_m[di][o] + s;
          out_m[di][o] = acc_m[di][o][7:0];
        end
      end
  endtask

  function automatic logic signed [31:0] ref_op(alu_op_t op, logic signed [31:0] a, logic signed [31:0] b);
    case (op)
      ALU_MIN:  return a < b ? a : b;
      ALU_MAX:  return a > b ? a : b;
      ALU_ADD:  return a + b;
      ALU_SHR:  return b >= 0 ? a >>> b[4:0] : a << ((-b) & 31);
      ALU_MUL:  begin logic signed [7:0] x = a[7:0], y = b[7:0]; return 32'(x) * 32'(y); end
      ALU_CLIP: return a > b ? b : (a < -b ? -b : a);
      default:  return a;
    endcase
  endfunction

  task automatic m_alu(alu_insn_t g);
    for (int a = 0; a < int'(g.iter_out); a++) for (int b = 0; b < int'(g.iter_in); b++)
      for (int u = int'(g.uop_bgn); u < int'(g.uop_end); u++) begin
        uop_t up = uop_t'(uop_m[u]);
        int di = int'(up.dst) + a * int'(g.dst_fo) + b * int'(g.dst_fi);
        int si = int'(up.src) + a * int'(g.src_fo) + b * int'(g.src_fi);
        for (int o = 0; o < BO; o++) begin
          acc_m[di][o] = g.reset ? 32'sd0 : ref_op(g.alu_op, acc_m[di][o], g.use_imm ? 32'(signed'(g.imm)) : acc_m[si][o]);
          out_m[di][o] = acc_m[di][o][7:0];
        end
      end
  endtask

  task automatic m_store(mem_insn_t m);
    for (int r = 0; r < int'(m.y_size); r++) for (int c = 0; c < int'(m.x_size); c++)
      for (int o = 0; o < BO; o++)
        dram_m[(int'(m.dram_base) + r * int'(m.x_stride) + c) * BO + o] = out_m[int'(m.sram_base) + r * int'(m.x_size) + c][o];
  endtask

  task automatic emit(logic [127:0] i);
    insn_t x = insn_t'(i);
    prog[np++] = i;
    case (x.opcode)
      OP_LOAD:  m_load(mem_insn_t'(i));
      OP_STORE: m_store(mem_insn_t'(i));
      OP_GEMM:  m_gemm(gemm_insn_t'(i));
      OP_ALU:   m_alu(alu_insn_t'(i));
      default: ;
    endcase
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dep_t none;
    mem_insn_t fin;
    none = '0;
    start = 0; insn_addr = 0; insn_count = 0;
    for (int k = 0; k < NM; k++) mc[k] = 0;
    // DRAM contents: random data everywhere, small biases, micro-ops
    for (int k = 0; k < 65536; k++) u_mem.mem[k] = {$urandom, $urandom};
    for (int t = 0; t < 48; t++) for (int o = 0; o < BO; o++) begin
      automatic logic [31:0] v = 32'($signed($urandom % 4001) - 2000);
      for (int b = 0; b < 4; b++) u_mem.write_byte(ACC_B + t * 64 + o * 4 + b, v[b*8 +: 8]);
    end
    uops[0] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    uops[1] = '{rsvd: 0, wgt: 1, src: 1, dst: 0};
    uops[2] = '{rsvd: 0, wgt: 2, src: 2, dst: 1};
    uops[3] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    uops[4] = '{rsvd: 0, wgt: 0, src: 24, dst: 0};
    uops[5] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    uops[6] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    uops[7] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    for (int u = 0; u < 8; u++) for (int b = 0; b < 8; b++) u_mem.write_byte(UOP_B + u * 8 + b, uops[u][b*8 +: 8]);

    // ---- round 1 ----
    emit(ld(MEM_INP, 0, INP_B / 16, 4, 2, 5, 1, 1, 1, 1, 0, none));
    emit(ld(MEM_WGT, 0, WGT_B / 256, 3, 1, 3, 0, 0, 0, 0, 0, dp(0, 0, 0, 1)));
    emit(ld(MEM_UOP, 0, UOP_B / 8, 8, 1, 8, 0, 0, 0, 0, 0, none));
    emit(ld(MEM_ACC, 0, ACC_B / 64, 48, 1, 48, 0, 0, 0, 0, 0, none));
    emit(gm(0, 0, 3, 4, 4, 6, 1, 6, 1, 0, 0, dp(1, 0, 0, 0)));
    emit(al(ALU_MUL, 1, 3, 3, none));
    emit(al(ALU_ADD, 0, 0, 4, none));
    emit(al(ALU_SHR, 1, 2, 3, none));
    emit(al(ALU_MAX, 1, 0, 3, none));
    emit(al(ALU_CLIP, 1, 100, 3, none));
    emit(al(ALU_ADD, 1, -5, 3, dp(0, 0, 1, 1)));
    emit(ld(MEM_OUT, 0, OUT1_B / 16, 6, 4, 6, 0, 0, 0, 0, 0, dp(1, 0, 1, 0)) | 128'(OP_STORE));
    // ---- round 2 ----
    emit(ld(MEM_INP, 0, INP_B / 16 + 4, 3, 3, 7, 2, 0, 0, 1, 1, dp(0, 1, 0, 1)));
    emit(gm(1, 3, 4, 4, 6, 6, 1, 0, 0, 0, 0, dp(0, 1, 0, 0)));
    emit(gm(0, 0, 3, 4, 3, 5, 1, 5, 1, 0, 0, dp(1, 0, 0, 0)));
    emit(al(ALU_MIN, 0, 0, 4, none));
    emit(al(ALU_SHR, 1, 3, 3, none));
    emit(al(ALU_MUL, 1, -2, 3, dp(0, 0, 0, 1)));
    emit(ld(MEM_OUT, 0, OUT2_B / 16, 6, 4, 8, 0, 0, 0, 0, 0, dp(1, 0, 1, 0)) | 128'(OP_STORE));
    fin = '0; fin.opcode = OP_FINISH; fin.dep = dp(0, 1, 0, 0);
    emit(fin);
    for (int i = 0; i < np; i++) for (int b = 0; b < 16; b++) u_mem.write_byte(INSN_B + i * 16 + b, prog[i][b*8 +: 8]);

    repeat (4) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    insn_addr = INSN_B; insn_count = np; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    repeat (5) @(negedge clk);
    $display("program of %0d instructions finished in %0d cycles", np, cycles);
    // compare output regions
    foreach (dram_m[a]) begin
      checks++;
      if (rb(a) !== dram_m[a]) begin
        failures++; if (failures < 8) $display("DRAM byte %h: got %h expected %h", a, rb(a), dram_m[a]);
      end
    end
    mc[18] = u_mem.reorders;
    mc[22] = (ops_seen[5:0] == 6'h3f) ? 1 : 0;
    for (int k = 0; k < NM; k++) begin
      checks++;
      $display("mechanism %-16s %0d", mname[k], mc[k]);
      if (mc[k] == 0) begin failures++; $display("mechanism %s never happened", mname[k]); end
    end
    checks++; if (gemm_ii_checks != 3) begin failures++; $display("gemm II checked %0d times", gemm_ii_checks); end
    checks++; if (!done || cycles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
