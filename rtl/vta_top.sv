// vta_top: load-compute-store tensor accelerator for DNN inference.
//
// The host writes an instruction stream to DRAM and pulses start with its
// address and length. The fetch unit reads the stream and sorts instructions
// into three command queues. The load module fills the input and weight
// buffers, the compute module runs micro-op and accumulator loads, GEMM and
// ALU instructions on its register file and writes 8-bit results to the
// output buffer, and the store module copies the output buffer to DRAM. The
// three modules run concurrently; four dependency token queues (LD->CMP,
// CMP->LD, CMP->ST, ST->CMP) order them where instructions carry pop/push
// bits. All DRAM traffic passes through the memory engine (vme), whose five
// read clients are fetch, micro-op, input, weight and accumulator loads and
// whose write client is the store module; reads are tagged and may complete
// out of order. done rises when a FINISH instruction completes and stays high
// until the next start; cycles counts clock cycles from start to FINISH.
// DRAM is outside: the top exposes an AXI-style read channel (ar/r, id =
// tag) and write channel (aw/w/b).
// Default configuration: BATCH 1, BLOCK_IN = BLOCK_OUT = 16 (256 MACs per
// cycle), 8192-entry scratchpads, 64-bit DRAM bus.
// Timing: GEMM steps at one per cycle and ALU steps at one (immediate) or
// one every two cycles (register operand), as the paper states; load, compute
// and store overlap when the program's tokens allow it.
// Follows the paper: block set, queues, token scheme, VME clients. This
// design's choices: host port set, queue depths, tag count, DRAM port format.
// Lint note: the rst_n 'synchronous and asynchronous' remark comes from the
// sub-modules' assertions' disable iff (!rst_n), which samples reset on the clock; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module vta_top
  import vta_pkg::*;
#(
  parameter int unsigned BATCH      = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_IN   = vta_pkg::CFG_BLOCK_IN,
  parameter int unsigned BLOCK_OUT  = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned BUS_BITS   = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned INP_DEPTH  = 8192,
  parameter int unsigned WGT_DEPTH  = 8192,
  parameter int unsigned ACC_DEPTH  = 8192,
  parameter int unsigned UOP_DEPTH  = 8192,
  parameter int unsigned NUM_TAGS   = 8,
  parameter int unsigned CMDQ_DEPTH = 8,
  parameter int unsigned DEPQ_DEPTH = 8,
  localparam int unsigned TW = $clog2(NUM_TAGS)
) (
  input  logic clk,
  input  logic rst_n,
  // host control
  input  logic        start,
  input  logic [31:0] insn_addr,
  input  logic [31:0] insn_count,
  output logic        done,
  output logic [31:0] cycles,
  // DRAM read channels
  output logic                  mem_ar_valid,
  input  logic                  mem_ar_ready,
  output logic [31:0]           mem_ar_addr,
  output logic [LEN_W-1:0]      mem_ar_len,
  output logic [TW-1:0]         mem_ar_id,
  input  logic                  mem_r_valid,
  output logic                  mem_r_ready,
  input  logic [BUS_BITS-1:0]   mem_r_data,
  input  logic [TW-1:0]         mem_r_id,
  input  logic                  mem_r_last,
  // DRAM write channels
  output logic                  mem_aw_valid,
  input  logic                  mem_aw_ready,
  output logic [31:0]           mem_aw_addr,
  output logic [LEN_W-1:0]      mem_aw_len,
  output logic                  mem_w_valid,
  input  logic                  mem_w_ready,
  output logic [BUS_BITS-1:0]   mem_w_data,
  output logic [BUS_BITS/8-1:0] mem_w_strb,
  output logic                  mem_w_last,
  input  logic                  mem_b_valid,
  output logic                  mem_b_ready
);
  localparam int unsigned INP_T = BATCH * BLOCK_IN * 8;
  localparam int unsigned WGT_T = BLOCK_OUT * BLOCK_IN * 8;
  localparam int unsigned OUT_T = BATCH * BLOCK_OUT * 8;
  localparam int unsigned IBLK  = (INP_T < BUS_BITS) ? INP_T : BUS_BITS;
  localparam int unsigned WBLK  = (WGT_T < BUS_BITS) ? WGT_T : BUS_BITS;
  localparam int unsigned ILN   = BUS_BITS / IBLK;
  localparam int unsigned WLN   = BUS_BITS / WBLK;
  localparam int unsigned IBW   = $clog2(INP_T / IBLK + 1);
  localparam int unsigned WBW   = $clog2(WGT_T / WBLK + 1);
  localparam int unsigned IAW   = $clog2(INP_DEPTH);
  localparam int unsigned WAW   = $clog2(WGT_DEPTH);
  localparam int unsigned AAW   = $clog2(ACC_DEPTH);
  localparam int unsigned NCL   = 5;

  // ---------------- VME client wiring ----------------
  logic [NCL-1:0]             rc_valid, rc_ready, rd_valid;
  logic [NCL-1:0][31:0]       rc_addr;
  logic [NCL-1:0][LEN_W-1:0]  rc_len;
  logic [NCL-1:0][META_W-1:0] rc_meta;
  logic [BUS_BITS-1:0]        rd_bus;
  logic [META_W-1:0]          rd_meta;
  logic [LEN_W-1:0]           rd_beat;
  logic                       wc_valid, wc_ready, wd_valid, wd_ready, w_ack;
  logic [31:0]                wc_addr;
  logic [LEN_W-1:0]           wc_len;
  logic [BUS_BITS-1:0]        wd_data;
  logic [BUS_BITS/8-1:0]      wd_strb;
  logic [$clog2(NUM_TAGS+1)-1:0] vme_inflight;

  vme #(.NCLIENT(NCL), .NUM_TAGS(NUM_TAGS), .BUS_BITS(BUS_BITS)) u_vme (
    .clk, .rst_n,
    .rd_cmd_valid(rc_valid), .rd_cmd_ready(rc_ready), .rd_cmd_addr(rc_addr), .rd_cmd_len(rc_len),
    .rd_cmd_meta(rc_meta), .rd_data_valid(rd_valid), .rd_data(rd_bus), .rd_data_meta(rd_meta),
    .rd_data_beat(rd_beat),
    .ar_valid(mem_ar_valid), .ar_ready(mem_ar_ready), .ar_addr(mem_ar_addr), .ar_len(mem_ar_len),
    .ar_id(mem_ar_id), .r_valid(mem_r_valid), .r_ready(mem_r_ready), .r_data(mem_r_data),
    .r_id(mem_r_id), .r_last(mem_r_last),
    .wr_cmd_valid(wc_valid), .wr_cmd_ready(wc_ready), .wr_cmd_addr(wc_addr), .wr_cmd_len(wc_len),
    .wr_data_valid(wd_valid), .wr_data_ready(wd_ready), .wr_data(wd_data), .wr_strb(wd_strb),
    .wr_ack(w_ack),
    .aw_valid(mem_aw_valid), .aw_ready(mem_aw_ready), .aw_addr(mem_aw_addr), .aw_len(mem_aw_len),
    .w_valid(mem_w_valid), .w_ready(mem_w_ready), .w_data(mem_w_data), .w_strb(mem_w_strb),
    .w_last(mem_w_last), .b_valid(mem_b_valid), .b_ready(mem_b_ready),
    .inflight(vme_inflight));

  // ---------------- fetch and command queues ----------------
  logic fetch_busy;
  logic f_ld_v, f_ld_r, f_cmp_v, f_cmp_r, f_st_v, f_st_r;
  logic [INSN_BITS-1:0] f_insn;

  fetch #(.BUS_BITS(BUS_BITS)) u_fetch (
    .clk, .rst_n, .start, .insn_addr, .insn_count, .busy(fetch_busy),
    .rd_cmd_valid(rc_valid[0]), .rd_cmd_ready(rc_ready[0]), .rd_cmd_addr(rc_addr[0]),
    .rd_cmd_len(rc_len[0]), .rd_cmd_meta(rc_meta[0]),
    .rd_data_valid(rd_valid[0]), .rd_data(rd_bus), .rd_data_meta(rd_meta), .rd_data_beat(rd_beat),
    .ld_valid(f_ld_v), .ld_ready(f_ld_r), .cmp_valid(f_cmp_v), .cmp_ready(f_cmp_r),
    .st_valid(f_st_v), .st_ready(f_st_r), .insn_out(f_insn));

  logic ldq_v, ldq_r, cmpq_v, cmpq_r, stq_v, stq_r;
  logic [INSN_BITS-1:0] ldq_d, cmpq_d, stq_d;

  sync_fifo #(.WIDTH(INSN_BITS), .DEPTH(CMDQ_DEPTH)) u_ldq (
    .clk, .rst_n, .in_valid(f_ld_v), .in_ready(f_ld_r), .in_data(f_insn),
    .out_valid(ldq_v), .out_ready(ldq_r), .out_data(ldq_d), .count());
  sync_fifo #(.WIDTH(INSN_BITS), .DEPTH(CMDQ_DEPTH)) u_cmpq (
    .clk, .rst_n, .in_valid(f_cmp_v), .in_ready(f_cmp_r), .in_data(f_insn),
    .out_valid(cmpq_v), .out_ready(cmpq_r), .out_data(cmpq_d), .count());
  sync_fifo #(.WIDTH(INSN_BITS), .DEPTH(CMDQ_DEPTH)) u_stq (
    .clk, .rst_n, .in_valid(f_st_v), .in_ready(f_st_r), .in_data(f_insn),
    .out_valid(stq_v), .out_ready(stq_r), .out_data(stq_d), .count());

  // ---------------- dependency queues ----------------
  logic l2c_push, l2c_can, l2c_pop, l2c_has;
  logic c2l_push, c2l_can, c2l_pop, c2l_has;
  logic c2s_push, c2s_can, c2s_pop, c2s_has;
  logic s2c_push, s2c_can, s2c_pop, s2c_has;

  dep_queue #(.DEPTH(DEPQ_DEPTH)) u_ld2cmp (.clk, .rst_n, .push(l2c_push), .can_push(l2c_can),
    .pop(l2c_pop), .has_token(l2c_has), .count());
  dep_queue #(.DEPTH(DEPQ_DEPTH)) u_cmp2ld (.clk, .rst_n, .push(c2l_push), .can_push(c2l_can),
    .pop(c2l_pop), .has_token(c2l_has), .count());
  dep_queue #(.DEPTH(DEPQ_DEPTH)) u_cmp2st (.clk, .rst_n, .push(c2s_push), .can_push(c2s_can),
    .pop(c2s_pop), .has_token(c2s_has), .count());
  dep_queue #(.DEPTH(DEPQ_DEPTH)) u_st2cmp (.clk, .rst_n, .push(s2c_push), .can_push(s2c_can),
    .pop(s2c_pop), .has_token(s2c_has), .count());

  // ---------------- load module and input / weight buffers ----------------
  logic [ILN-1:0]           iw_v, iw_a;
  logic [ILN-1:0][IAW-1:0]  iw_i;
  logic [ILN-1:0][IBW-1:0]  iw_b;
  logic [ILN-1:0][IBLK-1:0] iw_d;
  logic [WLN-1:0]           ww_v, ww_a;
  logic [WLN-1:0][WAW-1:0]  ww_i;
  logic [WLN-1:0][WBW-1:0]  ww_b;
  logic [WLN-1:0][WBLK-1:0] ww_d;
  logic load_busy;
  logic [1:0] load_pad_yield;

  load_module #(.BATCH(BATCH), .BLOCK_IN(BLOCK_IN), .BLOCK_OUT(BLOCK_OUT), .BUS_BITS(BUS_BITS),
                .INP_DEPTH(INP_DEPTH), .WGT_DEPTH(WGT_DEPTH)) u_load (
    .clk, .rst_n, .cmd_valid(ldq_v), .cmd_ready(ldq_r), .cmd_data(ldq_d),
    .cmp2ld_has(c2l_has), .cmp2ld_pop(c2l_pop), .ld2cmp_can(l2c_can), .ld2cmp_push(l2c_push),
    .rd_cmd_valid(rc_valid[3:2]), .rd_cmd_ready(rc_ready[3:2]), .rd_cmd_addr(rc_addr[3:2]),
    .rd_cmd_len(rc_len[3:2]), .rd_cmd_meta(rc_meta[3:2]), .rd_data_valid(rd_valid[3:2]),
    .rd_data(rd_bus), .rd_data_meta(rd_meta), .rd_data_beat(rd_beat),
    .inp_wr_valid(iw_v), .inp_wr_all(iw_a), .inp_wr_idx(iw_i), .inp_wr_blk(iw_b), .inp_wr_data(iw_d),
    .wgt_wr_valid(ww_v), .wgt_wr_all(ww_a), .wgt_wr_idx(ww_i), .wgt_wr_blk(ww_b), .wgt_wr_data(ww_d),
    .busy(load_busy), .pad_yield(load_pad_yield));

  logic             inp_rd_en, wgt_rd_en;
  logic [IAW-1:0]   inp_rd_idx;
  logic [WAW-1:0]   wgt_rd_idx;
  logic [INP_T-1:0] inp_rd_data;
  logic [WGT_T-1:0] wgt_rd_data;
  logic             inp_fwd, wgt_fwd;

  tensor_sram #(.DEPTH(INP_DEPTH), .TBITS(INP_T), .BLKBITS(IBLK), .NLANES(ILN)) u_inp_buf (
    .clk, .wr_valid(iw_v), .wr_all(iw_a), .wr_idx(iw_i), .wr_blk(iw_b), .wr_data(iw_d),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0),
    .rd_en(inp_rd_en), .rd_idx(inp_rd_idx), .rd_data(inp_rd_data), .rd_fwd(inp_fwd));

  tensor_sram #(.DEPTH(WGT_DEPTH), .TBITS(WGT_T), .BLKBITS(WBLK), .NLANES(WLN)) u_wgt_buf (
    .clk, .wr_valid(ww_v), .wr_all(ww_a), .wr_idx(ww_i), .wr_blk(ww_b), .wr_data(ww_d),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0),
    .rd_en(wgt_rd_en), .rd_idx(wgt_rd_idx), .rd_data(wgt_rd_data), .rd_fwd(wgt_fwd));

  // ---------------- compute module ----------------
  logic             out_wr_en, finish, compute_busy, acc_fwd;
  logic [AAW-1:0]   out_wr_idx;
  logic [OUT_T-1:0] out_wr_data;
  logic [1:0]       cmp_rc_valid;

  compute_module #(.BATCH(BATCH), .BLOCK_IN(BLOCK_IN), .BLOCK_OUT(BLOCK_OUT), .BUS_BITS(BUS_BITS),
                   .INP_DEPTH(INP_DEPTH), .WGT_DEPTH(WGT_DEPTH), .ACC_DEPTH(ACC_DEPTH),
                   .UOP_DEPTH(UOP_DEPTH)) u_compute (
    .clk, .rst_n, .cmd_valid(cmpq_v), .cmd_ready(cmpq_r), .cmd_data(cmpq_d),
    .ld2cmp_has(l2c_has), .ld2cmp_pop(l2c_pop), .st2cmp_has(s2c_has), .st2cmp_pop(s2c_pop),
    .cmp2ld_can(c2l_can), .cmp2ld_push(c2l_push), .cmp2st_can(c2s_can), .cmp2st_push(c2s_push),
    .rd_cmd_valid(cmp_rc_valid), .rd_cmd_ready({rc_ready[4], rc_ready[1]}),
    .rd_cmd_addr({rc_addr[4], rc_addr[1]}), .rd_cmd_len({rc_len[4], rc_len[1]}),
    .rd_cmd_meta({rc_meta[4], rc_meta[1]}), .rd_data_valid({rd_valid[4], rd_valid[1]}),
    .rd_data(rd_bus), .rd_data_meta(rd_meta), .rd_data_beat(rd_beat),
    .inp_rd_en, .inp_rd_idx, .inp_rd_data, .wgt_rd_en, .wgt_rd_idx, .wgt_rd_data,
    .out_wr_en, .out_wr_idx, .out_wr_data, .finish, .busy(compute_busy), .acc_fwd);
  assign rc_valid[1] = cmp_rc_valid[0];
  assign rc_valid[4] = cmp_rc_valid[1];

  // ---------------- output buffer and store module ----------------
  logic             out_rd_en, out_fwd, store_busy;
  logic [AAW-1:0]   out_rd_idx;
  logic [OUT_T-1:0] out_rd_data;

  tensor_sram #(.DEPTH(ACC_DEPTH), .TBITS(OUT_T), .BLKBITS(OUT_T), .NLANES(1)) u_out_buf (
    .clk, .wr_valid(1'b0), .wr_all(1'b0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(out_wr_en), .fw_idx(out_wr_idx), .fw_data(out_wr_data),
    .rd_en(out_rd_en), .rd_idx(out_rd_idx), .rd_data(out_rd_data), .rd_fwd(out_fwd));

  store_module #(.BATCH(BATCH), .BLOCK_OUT(BLOCK_OUT), .BUS_BITS(BUS_BITS), .OUT_DEPTH(ACC_DEPTH)) u_store (
    .clk, .rst_n, .cmd_valid(stq_v), .cmd_ready(stq_r), .cmd_data(stq_d),
    .cmp2st_has(c2s_has), .cmp2st_pop(c2s_pop), .st2cmp_can(s2c_can), .st2cmp_push(s2c_push),
    .out_rd_en, .out_rd_idx, .out_rd_data,
    .wr_cmd_valid(wc_valid), .wr_cmd_ready(wc_ready), .wr_cmd_addr(wc_addr), .wr_cmd_len(wc_len),
    .wr_data_valid(wd_valid), .wr_data_ready(wd_ready), .wr_data(wd_data), .wr_strb(wd_strb),
    .wr_ack(w_ack), .busy(store_busy));

  // ---------------- host status ----------------
  logic running;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done    <= 1'b0;
      running <= 1'b0;
      cycles  <= '0;
    end else if (start) begin
      done    <= 1'b0;
      running <= 1'b1;
      cycles  <= '0;
    end else if (running) begin
      cycles <= cycles + 1;
      if (finish) begin
        done    <= 1'b1;
        running <= 1'b0;
      end
    end
  end

endmodule
