// tb_compute_module: compute_module with preloaded input and weight
// buffers, an output buffer, the vme and the DRAM model. A short program is
// sent through the command interface:
//   LOAD UOP, LOAD ACC (through both VME clients),
//   GEMM with pop_prev (waits for a load-to-compute token that is withheld),
//   ALU ADD (register operand), ALU MAX (immediate) with push_prev/push_next,
//   GEMM reset with pop_next (waits for a store-to-compute token), FINISH.
// Checks: nothing executes before each token is given, one token is pushed to
// each of the load and store queues, the register file and every output
// buffer entry match a reference model after the program, and finish pulses
// exactly once.
// Timing: tokens are withheld for 30 cycles each; GEMM/ALU rates are
// checked in their own testbenches.
module tb_compute_module;
  import vta_pkg::*;
  localparam int BI = 16, BO = 16, D = 8192, WORDS = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready; logic [127:0] cmd_data;
  logic l2c_has, l2c_pop, s2c_has, s2c_pop, c2l_push, c2s_push, finish, busy, acc_fwd;
  logic [4:0] rcv, rcr, rdv;
  logic [4:0][31:0] rca; logic [4:0][7:0] rcl; logic [4:0][31:0] rcm;
  logic [63:0] rd_data; logic [31:0] rd_data_meta; logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [63:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [63:0] w_data; logic [7:0] w_strb;
  logic wr_cmd_ready, wr_data_ready, wr_ack; logic [3:0] inflight;
  logic inp_rd_en, wgt_rd_en, out_wr_en; logic [12:0] inp_rd_idx, wgt_rd_idx, out_wr_idx;
  logic [127:0] inp_rd_data, out_wr_data, oq; logic [2047:0] wgt_rd_data; logic f0, f1, f2;

  vme #(.NCLIENT(5), .NUM_TAGS(8), .BUS_BITS(64)) u_vme (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd_ready(rcr), .rd_cmd_addr(rca), .rd_cmd_len(rcl),
    .rd_cmd_meta(rcm), .rd_data_valid(rdv), .rd_data, .rd_data_meta, .rd_data_beat,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .wr_cmd_valid(1'b0), .wr_cmd_ready, .wr_cmd_addr(32'd0), .wr_cmd_len(8'd0),
    .wr_data_valid(1'b0), .wr_data_ready, .wr_data('0), .wr_strb('0), .wr_ack,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_strb, .w_last,
    .b_valid, .b_ready, .inflight);
  dram_model #(.BUS_BITS(64), .TW(3), .WORDS(WORDS), .LAT(5), .MAX_OUT(8)) u_mem (.*);
  assign rcv[3:2] = '0; assign rca[3:2] = '0; assign rcl[3:2] = '0; assign rcm[3:2] = '0;
  assign rcv[0] = 1'b0; assign rca[0] = '0; assign rcl[0] = '0; assign rcm[0] = '0;

  compute_module dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .ld2cmp_has(l2c_has), .ld2cmp_pop(l2c_pop), .st2cmp_has(s2c_has), .st2cmp_pop(s2c_pop),
    .cmp2ld_can(1'b1), .cmp2ld_push(c2l_push), .cmp2st_can(1'b1), .cmp2st_push(c2s_push),
    .rd_cmd_valid({rcv[4], rcv[1]}), .rd_cmd_ready({rcr[4], rcr[1]}), .rd_cmd_addr({rca[4], rca[1]}),
    .rd_cmd_len({rcl[4], rcl[1]}), .rd_cmd_meta({rcm[4], rcm[1]}), .rd_data_valid({rdv[4], rdv[1]}),
    .rd_data, .rd_data_meta, .rd_data_beat,
    .inp_rd_en, .inp_rd_idx, .inp_rd_data, .wgt_rd_en, .wgt_rd_idx, .wgt_rd_data,
    .out_wr_en, .out_wr_idx, .out_wr_data, .finish, .busy, .acc_fwd);
  tensor_sram #(.DEPTH(D), .TBITS(128), .BLKBITS(64)) u_inp (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(inp_rd_en), .rd_idx(inp_rd_idx), .rd_data(inp_rd_data), .rd_fwd(f0));
  tensor_sram #(.DEPTH(D), .TBITS(2048), .BLKBITS(64)) u_wgt (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(wgt_rd_en), .rd_idx(wgt_rd_idx), .rd_data(wgt_rd_data), .rd_fwd(f1));
  tensor_sram #(.DEPTH(D), .TBITS(128), .BLKBITS(128)) u_out (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(out_wr_en), .fw_idx(out_wr_idx), .fw_data(out_wr_data), .rd_en(1'b0), .rd_idx('0), .rd_data(oq), .rd_fwd(f2));

  int c2l = 0, c2s = 0, fins = 0, gemm_early = 0, uop_beats = 0, acc_beats = 0;
  bit l2c_given = 0, s2c_given = 0;
  always @(posedge clk) if (rst_n) begin
    if (c2l_push) c2l++;
    if (c2s_push) c2s++;
    if (finish) fins++;
    if (rdv[1]) uop_beats++;
    if (rdv[4]) acc_beats++;
    if (dut.u_gemm.busy && !dut.u_gemm.ins.reset && !l2c_given) gemm_early++;
    if (dut.u_gemm.busy && dut.u_gemm.ins.reset && !s2c_given) gemm_early++;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic signed [7:0]  inp_m [32][BI];
  logic signed [7:0]  wgt_m [8][BO][BI];
  logic signed [31:0] acc_m [64][BO];
  logic [7:0]         out_m [64][BO];
  bit                 out_w [64];
  uop_t uops [4];

  task automatic send(logic [127:0] i);
    @(negedge clk); cmd_valid = 1; cmd_data = i;
    do @(posedge clk); while (!cmd_ready); #1 cmd_valid = 0;
  endtask

  initial begin
    mem_insn_t m; gemm_insn_t g; alu_insn_t a;
    cmd_valid = 0; cmd_data = '0; l2c_has = 0; s2c_has = 0;
    for (int k = 0; k < WORDS; k++) u_mem.mem[k] = {$urandom, $urandom};
    for (int k = 0; k < D; k++) begin u_inp.mem[k] = '0; u_wgt.mem[k] = '0; u_out.mem[k] = '0; end
    for (int k = 0; k < 32; k++) for (int i = 0; i < BI; i++) begin
      inp_m[k][i] = 8'($urandom); u_inp.mem[k][i / 8][(i % 8) * 8 +: 8] = inp_m[k][i];
    end
    for (int k = 0; k < 8; k++) for (int o = 0; o < BO; o++) for (int i = 0; i < BI; i++) begin
      wgt_m[k][o][i] = 8'($urandom); u_wgt.mem[k][(o * BI + i) / 8][((o * BI + i) % 8) * 8 +: 8] = wgt_m[k][o][i];
    end
    // micro-ops at DRAM byte 0x100, accumulators (32 tensors) at 0x1000
    uops[0] = '{rsvd: 0, wgt: 0, src: 0, dst: 0};
    uops[1] = '{rsvd: 0, wgt: 1, src: 1, dst: 0};
    uops[2] = '{rsvd: 0, wgt: 0, src: 16, dst: 0};
    uops[3] = '{rsvd: 0, wgt: 2, src: 3, dst: 1};
    for (int u = 0; u < 4; u++) for (int b = 0; b < 8; b++) u_mem.write_byte('h100 + u * 8 + b, uops[u][b*8 +: 8]);
    for (int t = 0; t < 32; t++) for (int o = 0; o < BO; o++) begin
      automatic logic [31:0] v = 32'($signed($urandom % 2001) - 1000);
      for (int b = 0; b < 4; b++) u_mem.write_byte('h1000 + t * 64 + o * 4 + b, v[b*8 +: 8]);
      acc_m[t][o] = v;
    end
    for (int k = 0; k < 64; k++) out_w[k] = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    m = '0; m.opcode = OP_LOAD; m.mem_type = MEM_UOP; m.dram_base = 'h100 / 8; m.x_size = 4; m.y_size = 1; m.x_stride = 4;
    send(m);
    m.mem_type = MEM_ACC; m.dram_base = 'h1000 / 64; m.x_size = 32; m.x_stride = 32;
    send(m);
    // GEMM: acc[i0*4 + i1 (+1)] += ..., i0 < 4, i1 < 3, uops 0..1 and 3
    g = '0; g.opcode = OP_GEMM; g.dep.pop_prev = 1; g.uop_bgn = 0; g.uop_end = 2;
    g.iter_out = 4; g.iter_in = 3; g.dst_fo = 4; g.dst_fi = 1; g.src_fo = 3; g.src_fi = 1; g.wgt_fo = 1; g.wgt_fi = 0;
    send(g);
    repeat (30) @(negedge clk);
    l2c_has = 1; l2c_given = 1;
    do @(posedge clk); while (!l2c_pop); #1 l2c_has = 0;
    for (int i0 = 0; i0 < 4; i0++) for (int i1 = 0; i1 < 3; i1++) for (int u = 0; u < 2; u++) begin
      automatic int di = int'(uops[u].dst) + i0 * 4 + i1, si = int'(uops[u].src) + i0 * 3 + i1, wi = int'(uops[u].wgt) + i0;
      for (int o = 0; o < BO; o++) begin
        automatic logic signed [31:0] s = 0;
        for (int i = 0; i < BI; i++) s += 32'(inp_m[si][i]) * 32'(wgt_m[wi][o][i]);
        acc_m[di][o] += s; out_m[di][o] = acc_m[di][o][7:0]; out_w[di] = 1;
      end
    end
    // ALU ADD acc[d] += acc[d + 16], d < 16 (register operand)
    a = '0; a.opcode = OP_ALU; a.alu_op = ALU_ADD; a.use_imm = 0; a.uop_bgn = 2; a.uop_end = 3;
    a.iter_out = 4; a.iter_in = 4; a.dst_fo = 4; a.src_fo = 4; a.dst_fi = 1; a.src_fi = 1;
    send(a);
    for (int d = 0; d < 16; d++) for (int o = 0; o < BO; o++) begin
      acc_m[d][o] += acc_m[d + 16][o]; out_m[d][o] = acc_m[d][o][7:0]; out_w[d] = 1;
    end
    // ALU MAX with immediate 7 on acc[0..15], pushes to load and store
    a.alu_op = ALU_MAX; a.use_imm = 1; a.imm = 16'd7; a.dep.push_prev = 1; a.dep.push_next = 1;
    send(a);
    for (int d = 0; d < 16; d++) for (int o = 0; o < BO; o++) begin
      if (acc_m[d][o] < 7) acc_m[d][o] = 7;
      out_m[d][o] = acc_m[d][o][7:0];
    end
    // GEMM reset of acc[20..27] waiting for the store token
    g = '0; g.opcode = OP_GEMM; g.reset = 1; g.dep.pop_next = 1; g.uop_bgn = 0; g.uop_end = 1;
    g.iter_out = 2; g.iter_in = 4; g.dst_fo = 4; g.dst_fi = 1;
    send(g);
    repeat (30) @(negedge clk);
    s2c_has = 1; s2c_given = 1;
    do @(posedge clk); while (!s2c_pop); #1 s2c_has = 0;
    for (int d = 0; d < 8; d++) for (int o = 0; o < BO; o++) begin acc_m[d][o] = 0; out_m[d][o] = 0; end
    m = '0; m.opcode = OP_FINISH;
    send(m);
    repeat (30) @(negedge clk);

    checks++; if (gemm_early != 0) begin failures++; $display("GEMM ran before its token (%0d cycles)", gemm_early); end
    checks++; if (c2l != 1 || c2s != 1) begin failures++; $display("pushes ld %0d st %0d", c2l, c2s); end
    checks++; if (fins != 1) begin failures++; $display("finish pulses %0d", fins); end
    checks++; if (uop_beats != 4 || acc_beats != 32 * 8) begin failures++; $display("beats uop %0d acc %0d", uop_beats, acc_beats); end
    for (int k = 0; k < 32; k++) for (int o = 0; o < BO; o++) begin
      checks++;
      if (dut.u_acc_sram.mem[k][o / 2][(o % 2) * 32 +: 32] !== acc_m[k][o]) begin
        failures++; if (failures < 6) $display("acc[%0d][%0d] wrong", k, o);
      end
      if (out_w[k]) begin
        checks++;
        if (u_out.mem[k][0][o * 8 +: 8] !== out_m[k][o]) begin
          failures++; if (failures < 6) $display("out[%0d][%0d] wrong", k, o);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
