// tensor_gemm: pipelined matrix-vector GEMM core, one operation per cycle.
//
// A GEMM instruction runs three nested loops: i0 < iter_out, i1 < iter_in and
// a micro-op index u from uop_bgn to uop_end-1. For each step the micro-op
// gives base indices (dst, src, wgt) and
//     acc_idx = uop.dst + i0*dst_fo + i1*dst_fi
//     inp_idx = uop.src + i0*src_fo + i1*src_fi
//     wgt_idx = uop.wgt + i0*wgt_fo + i1*wgt_fi
//     acc[acc_idx] = reset ? 0 : acc[acc_idx] + inp[inp_idx] x wgt[wgt_idx]^T
//     out[acc_idx] = low 8 bits of each element of acc[acc_idx]
// inp is BATCH x BLOCK_IN 8-bit values, wgt is BLOCK_OUT x BLOCK_IN 8-bit
// values and acc is BATCH x BLOCK_OUT 32-bit values.
//
// Pipeline (one new step every cycle, initiation interval 1):
//   S0  index generator: loop offsets, micro-op cache read
//   S1  micro-op arrives; add offsets; read input and weight buffers
//   S2  input/weight arrive; matrix product (registered); read acc
//   S3  acc arrives; add product; write acc and output buffer
// The accumulator read in S2 and the write in S3 of the previous step can hit
// the same index in the same cycle; the scratchpad forwards the written value
// (the "=" compare and mux of the acc path). An in-flight counter counts steps
// issued but not written back; done pulses once the index generator has
// finished and the counter is zero (pipeline flushed).
// Timing: N steps take N + 4 cycles from start to done.
// Loop structure, II=1 pipeline and in-flight counter follow the design; the
// exact stage split and element widths are this design's choices.
// Interface: start/insn/busy/done, read ports of the micro-op cache, input
// and weight buffers and register file, write ports of the register file and
// output buffer.
module tensor_gemm
  import vta_pkg::*;
#(
  parameter int unsigned BATCH     = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_IN  = vta_pkg::CFG_BLOCK_IN,
  parameter int unsigned BLOCK_OUT = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned INP_DEPTH = 8192,
  parameter int unsigned WGT_DEPTH = 8192,
  parameter int unsigned ACC_DEPTH = 8192,
  parameter int unsigned UOP_DEPTH = 8192
) (
  input  logic clk,
  input  logic rst_n,
  input  logic       start,
  input  gemm_insn_t insn,
  output logic       busy,
  output logic       done,
  // micro-op cache read
  output logic                          uop_rd_en,
  output logic [$clog2(UOP_DEPTH)-1:0]  uop_rd_idx,
  input  logic [UOP_BITS-1:0]           uop_rd_data,
  // input buffer read
  output logic                          inp_rd_en,
  output logic [$clog2(INP_DEPTH)-1:0]  inp_rd_idx,
  input  logic [BATCH*BLOCK_IN*8-1:0]   inp_rd_data,
  // weight buffer read
  output logic                          wgt_rd_en,
  output logic [$clog2(WGT_DEPTH)-1:0]  wgt_rd_idx,
  input  logic [BLOCK_OUT*BLOCK_IN*8-1:0] wgt_rd_data,
  // register file read / write
  output logic                          acc_rd_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  acc_rd_idx,
  input  logic [BATCH*BLOCK_OUT*32-1:0] acc_rd_data,
  output logic                          acc_wr_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  acc_wr_idx,
  output logic [BATCH*BLOCK_OUT*32-1:0] acc_wr_data,
  // output buffer write
  output logic                          out_wr_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  out_wr_idx,
  output logic [BATCH*BLOCK_OUT*8-1:0]  out_wr_data
);
  localparam int unsigned UW = $clog2(UOP_DEPTH);
  localparam int unsigned IW = $clog2(INP_DEPTH);
  localparam int unsigned WW = $clog2(WGT_DEPTH);
  localparam int unsigned AW = $clog2(ACC_DEPTH);

  gemm_insn_t ins;

  // ---------------- S0: index generator ----------------
  logic        gen;                 // generator active
  logic [9:0]  i0, i1;
  logic [UOP_AW:0] u;
  logic [31:0] off_acc0, off_inp0, off_wgt0;   // i0 part
  logic [31:0] off_acc, off_inp, off_wgt;      // i0 + i1 part
  logic        last_u, last_i1, last_i0;

  assign last_u  = (u + 1'b1 == ins.uop_end);
  assign last_i1 = (i1 + 1'b1 == ins.iter_in);
  assign last_i0 = (i0 + 1'b1 == ins.iter_out);

  assign uop_rd_en  = gen;
  assign uop_rd_idx = UW'(u);

  // ---------------- pipeline registers ----------------
  logic        s1_v, s2_v, s3_v;
  logic [31:0] s1_acc, s1_inp, s1_wgt;
  logic [AW-1:0] s2_acc, s3_acc;
  logic        s1_rst, s2_rst, s3_rst;
  logic [BATCH*BLOCK_OUT*32-1:0] s3_prod;
  logic [15:0] inflight;

  uop_t uop;
  assign uop = uop_t'(uop_rd_data);

  // S1: address adders and buffer reads
  logic [31:0] a_inp, a_wgt, a_acc;
  assign a_inp = 32'(uop.src) + s1_inp;
  assign a_wgt = 32'(uop.wgt) + s1_wgt;
  assign a_acc = 32'(uop.dst) + s1_acc;
  assign inp_rd_en  = s1_v && !s1_rst;
  assign inp_rd_idx = IW'(a_inp);
  assign wgt_rd_en  = s1_v && !s1_rst;
  assign wgt_rd_idx = WW'(a_wgt);

  // S2: matrix product
  logic [BATCH*BLOCK_OUT*32-1:0] prod;
  always_comb begin
    for (int b = 0; b < BATCH; b++) begin
      for (int o = 0; o < BLOCK_OUT; o++) begin
        logic signed [31:0] sum;
        sum = '0;
        for (int i = 0; i < BLOCK_IN; i++)
          sum += 32'(signed'(inp_rd_data[(b*BLOCK_IN+i)*8 +: 8])) *
                 32'(signed'(wgt_rd_data[(o*BLOCK_IN+i)*8 +: 8]));
        prod[(b*BLOCK_OUT+o)*32 +: 32] = sum;
      end
    end
  end
  assign acc_rd_en  = s2_v;
  assign acc_rd_idx = s2_acc;

  // S3: accumulate and write back
  always_comb begin
    for (int e = 0; e < BATCH*BLOCK_OUT; e++) begin
      logic [31:0] v;
      v = s3_rst ? 32'd0 : acc_rd_data[e*32 +: 32] + s3_prod[e*32 +: 32];
      acc_wr_data[e*32 +: 32] = v;
      out_wr_data[e*8 +: 8]   = v[7:0];
    end
  end
  assign acc_wr_en  = s3_v;
  assign acc_wr_idx = s3_acc;
  assign out_wr_en  = s3_v;
  assign out_wr_idx = s3_acc;

  assign done = busy && !gen && (inflight == 0) && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; gen <= 1'b0; ins <= '0;
      i0 <= '0; i1 <= '0; u <= '0;
      off_acc0 <= '0; off_inp0 <= '0; off_wgt0 <= '0;
      off_acc <= '0; off_inp <= '0; off_wgt <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0;
      s1_acc <= '0; s1_inp <= '0; s1_wgt <= '0; s2_acc <= '0; s3_acc <= '0;
      s1_rst <= 1'b0; s2_rst <= 1'b0; s3_rst <= 1'b0;
      s3_prod <= '0;
      inflight <= '0;
    end else begin
      // pipeline advance
      s1_v <= gen;
      s1_acc <= off_acc; s1_inp <= off_inp; s1_wgt <= off_wgt; s1_rst <= ins.reset;
      s2_v <= s1_v; s2_acc <= AW'(a_acc); s2_rst <= s1_rst;
      s3_v <= s2_v; s3_acc <= s2_acc; s3_rst <= s2_rst; s3_prod <= prod;
      inflight <= inflight + (gen ? 16'd1 : 16'd0) - (s3_v ? 16'd1 : 16'd0);

      if (start && !busy) begin
        ins  <= insn;
        busy <= 1'b1;
        gen  <= (insn.iter_out != 0) && (insn.iter_in != 0) && (insn.uop_end > {1'b0, insn.uop_bgn});
        i0 <= '0; i1 <= '0; u <= {1'b0, insn.uop_bgn};
        off_acc0 <= '0; off_inp0 <= '0; off_wgt0 <= '0;
        off_acc <= '0; off_inp <= '0; off_wgt <= '0;
      end else if (busy) begin
        if (done) busy <= 1'b0;
        if (gen) begin
          if (!last_u) u <= u + 1'b1;
          else begin
            u <= {1'b0, ins.uop_bgn};
            if (!last_i1) begin
              i1 <= i1 + 1'b1;
              off_acc <= off_acc + 32'(ins.dst_fi);
              off_inp <= off_inp + 32'(ins.src_fi);
              off_wgt <= off_wgt + 32'(ins.wgt_fi);
            end else begin
              i1 <= '0;
              off_acc  <= off_acc0 + 32'(ins.dst_fo);
              off_inp  <= off_inp0 + 32'(ins.src_fo);
              off_wgt  <= off_wgt0 + 32'(ins.wgt_fo);
              off_acc0 <= off_acc0 + 32'(ins.dst_fo);
              off_inp0 <= off_inp0 + 32'(ins.src_fo);
              off_wgt0 <= off_wgt0 + 32'(ins.wgt_fo);
              if (!last_i0) i0 <= i0 + 1'b1;
              else          gen <= 1'b0;
            end
          end
        end
      end
    end
  end

endmodule
