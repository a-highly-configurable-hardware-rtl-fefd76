// compute_module: executes the compute command queue.
//
// Holds the accumulator register file (ACC_DEPTH tensors of BATCH x BLOCK_OUT
// 32-bit values) and the micro-op cache (UOP_DEPTH 64-bit micro-ops), and
// drives the GEMM core and the tensor ALU. Instructions handled:
//   LOAD UOP / LOAD ACC  -> tensor load into the micro-op cache / register file
//   GEMM                 -> tensor_gemm (reads input and weight buffers)
//   ALU                  -> tensor_alu
//   FINISH               -> raises finish for one cycle
// Both GEMM and ALU write the 8-bit truncation of each result to the output
// buffer, which the store module later copies to DRAM.
// Each instruction is taken from the queue, then its pop bits are honoured
// (pop_prev: LD->CMP, pop_next: ST->CMP; wait for a token and remove it),
// then it executes, then its push bits (push_prev: CMP->LD, push_next:
// CMP->ST; wait for room and insert a token). One instruction executes at a
// time, so GEMM and ALU share the register-file and micro-op ports through a
// multiplexer.
// Interface: command queue, four dependency queue ports, two VME read clients
// (micro-ops, accumulators), read ports of the input and weight buffers and
// the write port of the output buffer.
// The set of units and the placement of register file and micro-op cache
// inside compute follow the block diagram; the sequencing is this design's.
module compute_module
  import vta_pkg::*;
#(
  parameter int unsigned BATCH     = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_IN  = vta_pkg::CFG_BLOCK_IN,
  parameter int unsigned BLOCK_OUT = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned BUS_BITS  = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned INP_DEPTH = 8192,
  parameter int unsigned WGT_DEPTH = 8192,
  parameter int unsigned ACC_DEPTH = 8192,
  parameter int unsigned UOP_DEPTH = 8192,
  localparam int unsigned INP_T = BATCH * BLOCK_IN * 8,
  localparam int unsigned WGT_T = BLOCK_OUT * BLOCK_IN * 8,
  localparam int unsigned ACC_T = BATCH * BLOCK_OUT * 32,
  localparam int unsigned OUT_T = BATCH * BLOCK_OUT * 8,
  localparam int unsigned IAW   = $clog2(INP_DEPTH),
  localparam int unsigned WAW   = $clog2(WGT_DEPTH),
  localparam int unsigned AAW   = $clog2(ACC_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [INSN_BITS-1:0] cmd_data,
  // dependency queues
  input  logic ld2cmp_has,
  output logic ld2cmp_pop,
  input  logic st2cmp_has,
  output logic st2cmp_pop,
  input  logic cmp2ld_can,
  output logic cmp2ld_push,
  input  logic cmp2st_can,
  output logic cmp2st_push,
  // VME clients: [0] micro-ops, [1] accumulators
  output logic [1:0]             rd_cmd_valid,
  input  logic [1:0]             rd_cmd_ready,
  output logic [1:0][31:0]       rd_cmd_addr,
  output logic [1:0][LEN_W-1:0]  rd_cmd_len,
  output logic [1:0][META_W-1:0] rd_cmd_meta,
  input  logic [1:0]             rd_data_valid,
  input  logic [BUS_BITS-1:0]    rd_data,
  input  logic [META_W-1:0]      rd_data_meta,
  input  logic [LEN_W-1:0]       rd_data_beat,
  // input / weight buffer reads
  output logic             inp_rd_en,
  output logic [IAW-1:0]   inp_rd_idx,
  input  logic [INP_T-1:0] inp_rd_data,
  output logic             wgt_rd_en,
  output logic [WAW-1:0]   wgt_rd_idx,
  input  logic [WGT_T-1:0] wgt_rd_data,
  // output buffer write
  output logic             out_wr_en,
  output logic [AAW-1:0]   out_wr_idx,
  output logic [OUT_T-1:0] out_wr_data,
  output logic finish,
  output logic busy,
  output logic acc_fwd       // a register-file read was forwarded from a same-cycle write
);
  localparam int unsigned UAW   = $clog2(UOP_DEPTH);
  localparam int unsigned UBLK  = (UOP_BITS < BUS_BITS) ? UOP_BITS : BUS_BITS;
  localparam int unsigned ABLK  = (ACC_T < BUS_BITS) ? ACC_T : BUS_BITS;
  localparam int unsigned ULN   = BUS_BITS / UBLK;
  localparam int unsigned ALN   = BUS_BITS / ABLK;
  localparam int unsigned UBW   = $clog2(UOP_BITS / UBLK + 1);
  localparam int unsigned ABW   = $clog2(ACC_T / ABLK + 1);

  typedef enum logic [1:0] {S_IDLE, S_POP, S_EXEC, S_PUSH} state_t;
  state_t st;
  insn_t  ins;
  logic   started;
  assign busy = (st != S_IDLE);

  logic is_luop, is_lacc, is_gemm, is_alu, is_fin;
  mem_insn_t mins;
  assign mins = mem_insn_t'(ins);
  always_comb begin
    is_luop = (ins.opcode == OP_LOAD) && (mins.mem_type == MEM_UOP);
    is_lacc = (ins.opcode == OP_LOAD) && (mins.mem_type == MEM_ACC);
    is_gemm = (ins.opcode == OP_GEMM);
    is_alu  = (ins.opcode == OP_ALU);
    is_fin  = (ins.opcode == OP_FINISH);
  end

  logic go, uop_pad_yield, acc_pad_yield;
  assign go = (st == S_EXEC) && !started;
  logic luop_busy, luop_done, lacc_busy, lacc_done, gemm_busy, gemm_done, alu_busy, alu_done;

  // ---------------- micro-op cache ----------------
  logic [ULN-1:0]           u_wv, u_wa;
  logic [ULN-1:0][UAW-1:0]  u_wi;
  logic [ULN-1:0][UBW-1:0]  u_wb;
  logic [ULN-1:0][UBLK-1:0] u_wd;
  logic                     uop_rd_en, g_uop_en, a_uop_en;
  logic [UAW-1:0]           uop_rd_idx, g_uop_idx, a_uop_idx;
  logic [UOP_BITS-1:0]      uop_rd_data;
  logic                     uop_fwd;

  tensor_load #(.TBITS(UOP_BITS), .BUS_BITS(BUS_BITS), .DEPTH(UOP_DEPTH), .ELEM_BITS(UOP_BITS)) u_luop (
    .clk, .rst_n, .start(go && is_luop), .insn(mins), .busy(luop_busy), .done(luop_done),
    .rd_cmd_valid(rd_cmd_valid[0]), .rd_cmd_ready(rd_cmd_ready[0]), .rd_cmd_addr(rd_cmd_addr[0]),
    .rd_cmd_len(rd_cmd_len[0]), .rd_cmd_meta(rd_cmd_meta[0]),
    .rd_data_valid(rd_data_valid[0]), .rd_data, .rd_data_meta, .rd_data_beat,
    .wr_valid(u_wv), .wr_all(u_wa), .wr_idx(u_wi), .wr_blk(u_wb), .wr_data(u_wd), .pad_yield(uop_pad_yield));

  assign uop_rd_en  = is_gemm ? g_uop_en  : a_uop_en;
  assign uop_rd_idx = is_gemm ? g_uop_idx : a_uop_idx;

  tensor_sram #(.DEPTH(UOP_DEPTH), .TBITS(UOP_BITS), .BLKBITS(UBLK), .NLANES(ULN)) u_uop_sram (
    .clk, .wr_valid(u_wv), .wr_all(u_wa), .wr_idx(u_wi), .wr_blk(u_wb), .wr_data(u_wd),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0),
    .rd_en(uop_rd_en), .rd_idx(uop_rd_idx), .rd_data(uop_rd_data), .rd_fwd(uop_fwd));

  // ---------------- register file ----------------
  logic [ALN-1:0]           c_wv, c_wa;
  logic [ALN-1:0][AAW-1:0]  c_wi;
  logic [ALN-1:0][ABW-1:0]  c_wb;
  logic [ALN-1:0][ABLK-1:0] c_wd;
  logic             acc_rd_en, g_acc_rd_en, a_acc_rd_en;
  logic [AAW-1:0]   acc_rd_idx, g_acc_rd_idx, a_acc_rd_idx;
  logic [ACC_T-1:0] acc_rd_data;
  logic             acc_wr_en, g_acc_wr_en, a_acc_wr_en;
  logic [AAW-1:0]   acc_wr_idx, g_acc_wr_idx, a_acc_wr_idx;
  logic [ACC_T-1:0] acc_wr_data, g_acc_wr_data, a_acc_wr_data;
  logic             g_out_en, a_out_en;
  logic [AAW-1:0]   g_out_idx, a_out_idx;
  logic [OUT_T-1:0] g_out_data, a_out_data;

  tensor_load #(.TBITS(ACC_T), .BUS_BITS(BUS_BITS), .DEPTH(ACC_DEPTH), .ELEM_BITS(32)) u_lacc (
    .clk, .rst_n, .start(go && is_lacc), .insn(mins), .busy(lacc_busy), .done(lacc_done),
    .rd_cmd_valid(rd_cmd_valid[1]), .rd_cmd_ready(rd_cmd_ready[1]), .rd_cmd_addr(rd_cmd_addr[1]),
    .rd_cmd_len(rd_cmd_len[1]), .rd_cmd_meta(rd_cmd_meta[1]),
    .rd_data_valid(rd_data_valid[1]), .rd_data, .rd_data_meta, .rd_data_beat,
    .wr_valid(c_wv), .wr_all(c_wa), .wr_idx(c_wi), .wr_blk(c_wb), .wr_data(c_wd), .pad_yield(acc_pad_yield));

  always_comb begin
    if (is_gemm) begin
      acc_rd_en = g_acc_rd_en; acc_rd_idx = g_acc_rd_idx;
      acc_wr_en = g_acc_wr_en; acc_wr_idx = g_acc_wr_idx; acc_wr_data = g_acc_wr_data;
      out_wr_en = g_out_en;    out_wr_idx = g_out_idx;    out_wr_data = g_out_data;
    end else begin
      acc_rd_en = a_acc_rd_en; acc_rd_idx = a_acc_rd_idx;
      acc_wr_en = a_acc_wr_en; acc_wr_idx = a_acc_wr_idx; acc_wr_data = a_acc_wr_data;
      out_wr_en = a_out_en;    out_wr_idx = a_out_idx;    out_wr_data = a_out_data;
    end
  end

  tensor_sram #(.DEPTH(ACC_DEPTH), .TBITS(ACC_T), .BLKBITS(ABLK), .NLANES(ALN)) u_acc_sram (
    .clk, .wr_valid(c_wv), .wr_all(c_wa), .wr_idx(c_wi), .wr_blk(c_wb), .wr_data(c_wd),
    .fw_valid(acc_wr_en), .fw_idx(acc_wr_idx), .fw_data(acc_wr_data),
    .rd_en(acc_rd_en), .rd_idx(acc_rd_idx), .rd_data(acc_rd_data), .rd_fwd(acc_fwd));

  // ---------------- GEMM and ALU ----------------
  tensor_gemm #(.BATCH(BATCH), .BLOCK_IN(BLOCK_IN), .BLOCK_OUT(BLOCK_OUT), .INP_DEPTH(INP_DEPTH),
                .WGT_DEPTH(WGT_DEPTH), .ACC_DEPTH(ACC_DEPTH), .UOP_DEPTH(UOP_DEPTH)) u_gemm (
    .clk, .rst_n, .start(go && is_gemm), .insn(gemm_insn_t'(ins)), .busy(gemm_busy), .done(gemm_done),
    .uop_rd_en(g_uop_en), .uop_rd_idx(g_uop_idx), .uop_rd_data,
    .inp_rd_en, .inp_rd_idx, .inp_rd_data, .wgt_rd_en, .wgt_rd_idx, .wgt_rd_data,
    .acc_rd_en(g_acc_rd_en), .acc_rd_idx(g_acc_rd_idx), .acc_rd_data,
    .acc_wr_en(g_acc_wr_en), .acc_wr_idx(g_acc_wr_idx), .acc_wr_data(g_acc_wr_data),
    .out_wr_en(g_out_en), .out_wr_idx(g_out_idx), .out_wr_data(g_out_data));

  tensor_alu #(.BATCH(BATCH), .BLOCK_OUT(BLOCK_OUT), .ACC_DEPTH(ACC_DEPTH), .UOP_DEPTH(UOP_DEPTH)) u_alu (
    .clk, .rst_n, .start(go && is_alu), .insn(alu_insn_t'(ins)), .busy(alu_busy), .done(alu_done),
    .uop_rd_en(a_uop_en), .uop_rd_idx(a_uop_idx), .uop_rd_data,
    .acc_rd_en(a_acc_rd_en), .acc_rd_idx(a_acc_rd_idx), .acc_rd_data,
    .acc_wr_en(a_acc_wr_en), .acc_wr_idx(a_acc_wr_idx), .acc_wr_data(a_acc_wr_data),
    .out_wr_en(a_out_en), .out_wr_idx(a_out_idx), .out_wr_data(a_out_data));

  // ---------------- sequencing ----------------
  logic pops_ok, push_ok, exec_done;
  assign pops_ok = (!ins.dep.pop_prev || ld2cmp_has) && (!ins.dep.pop_next || st2cmp_has);
  assign push_ok = (!ins.dep.push_prev || cmp2ld_can) && (!ins.dep.push_next || cmp2st_can);
  assign cmd_ready   = (st == S_IDLE);
  assign ld2cmp_pop  = (st == S_POP) && pops_ok && ins.dep.pop_prev;
  assign st2cmp_pop  = (st == S_POP) && pops_ok && ins.dep.pop_next;
  assign cmp2ld_push = (st == S_PUSH) && push_ok && ins.dep.push_prev;
  assign cmp2st_push = (st == S_PUSH) && push_ok && ins.dep.push_next;
  assign finish      = go && is_fin;
  assign exec_done   = started && ((is_luop && luop_done) || (is_lacc && lacc_done) ||
                                   (is_gemm && gemm_done) || (is_alu && alu_done) ||
                                   !(is_luop || is_lacc || is_gemm || is_alu));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; started <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          ins <= insn_t'(cmd_data);
          st  <= S_POP;
        end
        S_POP: if (pops_ok) begin
          st <= S_EXEC;
          started <= 1'b0;
        end
        S_EXEC: begin
          started <= 1'b1;
          if (exec_done) st <= S_PUSH;
        end
        S_PUSH: if (push_ok) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
