// tensor_alu: pipelined vector ALU operating on the accumulator register file.
//
// An ALU instruction walks the same three loops as GEMM (i0 < iter_out,
// i1 < iter_in, micro-ops uop_bgn..uop_end-1) with
//     dst = uop.dst + i0*dst_fo + i1*dst_fi
//     src = uop.src + i0*src_fo + i1*src_fi
//     acc[dst] = op(acc[dst], use_imm ? imm : acc[src])     (element-wise)
//     out[dst] = low 8 bits of each element of acc[dst]
// with reset writing zero instead. Operations on signed 32-bit elements a, b:
//     MIN, MAX, ADD, SHR (arithmetic right shift by b, left shift when b < 0),
//     MUL  (signed product of the low 8 bits of a and b: element-wise 8-bit
//           multiply, used for depthwise convolution),
//     CLIP (clamp a to [-b, +b]).
// imm is a signed 16-bit value.
//
// The register file has one read port. With an immediate operand each step
// needs one read, so a step issues every cycle (II = 1): uop read, acc[dst]
// read, compute and write back. With a register operand each step needs two
// reads (dst, then src) and a step issues every second cycle (II = 2). A
// write back can meet a read of the same entry in the same cycle; the
// scratchpad forwards the written value. An in-flight counter flushes the
// pipeline: done pulses when the index generator has finished and no step is
// left. Timing: N immediate steps take N + 3 cycles, N register steps 2N + 3.
// The II values and the new MUL and CLIP operations follow the design; the
// opcode numbering and the CLIP bounds are this design's choices.
// Interface: start/insn/busy/done, micro-op cache read port, register-file
// read and write ports, output-buffer write port.
module tensor_alu
  import vta_pkg::*;
#(
  parameter int unsigned BATCH     = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_OUT = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned ACC_DEPTH = 8192,
  parameter int unsigned UOP_DEPTH = 8192
) (
  input  logic clk,
  input  logic rst_n,
  input  logic      start,
  input  alu_insn_t insn,
  output logic      busy,
  output logic      done,
  output logic                          uop_rd_en,
  output logic [$clog2(UOP_DEPTH)-1:0]  uop_rd_idx,
  input  logic [UOP_BITS-1:0]           uop_rd_data,
  output logic                          acc_rd_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  acc_rd_idx,
  input  logic [BATCH*BLOCK_OUT*32-1:0] acc_rd_data,
  output logic                          acc_wr_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  acc_wr_idx,
  output logic [BATCH*BLOCK_OUT*32-1:0] acc_wr_data,
  output logic                          out_wr_en,
  output logic [$clog2(ACC_DEPTH)-1:0]  out_wr_idx,
  output logic [BATCH*BLOCK_OUT*8-1:0]  out_wr_data
);
  localparam int unsigned UW = $clog2(UOP_DEPTH);
  localparam int unsigned AW = $clog2(ACC_DEPTH);
  localparam int unsigned NE = BATCH * BLOCK_OUT;

  alu_insn_t ins;
  logic      two;          // register operand: two reads per step

  // ---------------- index generator ----------------
  logic        gen, phase;
  logic [9:0]  i0, i1;
  logic [UOP_AW:0] u;
  logic [31:0] off_dst0, off_src0, off_dst, off_src;
  logic        issue, last_u, last_i1, last_i0;

  assign issue   = gen && !phase;
  assign last_u  = (u + 1'b1 == ins.uop_end);
  assign last_i1 = (i1 + 1'b1 == ins.iter_in);
  assign last_i0 = (i0 + 1'b1 == ins.iter_out);
  assign uop_rd_en  = issue;
  assign uop_rd_idx = UW'(u);

  // ---------------- pipeline ----------------
  logic          s1_v, s2_v, s3_v;
  logic [31:0]   s1_dst, s1_src;
  logic [AW-1:0] s2_dst, s2_src, s3_dst;
  logic [NE*32-1:0] s3_a;
  logic [15:0]   inflight;

  uop_t uop;
  assign uop = uop_t'(uop_rd_data);
  logic [31:0] a_dst, a_src;
  assign a_dst = 32'(uop.dst) + s1_dst;
  assign a_src = 32'(uop.src) + s1_src;

  // read port: s1 reads dst, s2 reads src (register operand only)
  always_comb begin
    if (s2_v && two) begin
      acc_rd_en  = 1'b1;
      acc_rd_idx = s2_src;
    end else begin
      acc_rd_en  = s1_v && !ins.reset;
      acc_rd_idx = AW'(a_dst);
    end
  end

  // operation
  function automatic logic [31:0] alu_f(alu_op_t op, logic [31:0] a, logic [31:0] b);
    logic signed [31:0] sa, sb;
    sa = signed'(a);
    sb = signed'(b);
    unique case (op)
      ALU_MIN:  return (sa < sb) ? a : b;
      ALU_MAX:  return (sa > sb) ? a : b;
      ALU_ADD:  return a + b;
      ALU_SHR:  return (sb >= 0) ? 32'(sa >>> b[4:0]) : 32'(a << (5'(-sb)));
      ALU_MUL:  return 32'(signed'(a[7:0]) * signed'(b[7:0]));
      ALU_CLIP: return (sa > sb) ? b : ((sa < -sb) ? 32'(-sb) : a);
      default:  return a;
    endcase
  endfunction

  logic          wb_v;
  logic [AW-1:0] wb_idx;
  logic [NE*32-1:0] wb_a, wb_b;
  always_comb begin
    if (two) begin
      wb_v   = s3_v;
      wb_idx = s3_dst;
      wb_a   = s3_a;
      wb_b   = acc_rd_data;
    end else begin
      wb_v   = s2_v;
      wb_idx = s2_dst;
      wb_a   = acc_rd_data;
      for (int e = 0; e < NE; e++) wb_b[e*32 +: 32] = 32'(signed'(ins.imm));
    end
    for (int e = 0; e < NE; e++) begin
      logic [31:0] r;
      r = ins.reset ? 32'd0 : alu_f(ins.alu_op, wb_a[e*32 +: 32], wb_b[e*32 +: 32]);
      acc_wr_data[e*32 +: 32] = r;
      out_wr_data[e*8 +: 8]   = r[7:0];
    end
  end
  assign acc_wr_en  = wb_v;
  assign acc_wr_idx = wb_idx;
  assign out_wr_en  = wb_v;
  assign out_wr_idx = wb_idx;

  assign done     = busy && !gen && (inflight == 0) && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; gen <= 1'b0; phase <= 1'b0; ins <= '0; two <= 1'b0;
      i0 <= '0; i1 <= '0; u <= '0;
      off_dst0 <= '0; off_src0 <= '0; off_dst <= '0; off_src <= '0;
      s1_v <= 1'b0; s2_v <= 1'b0; s3_v <= 1'b0;
      s1_dst <= '0; s1_src <= '0; s2_dst <= '0; s2_src <= '0; s3_dst <= '0;
      s3_a <= '0;
      inflight <= '0;
    end else begin
      s1_v <= issue;
      s1_dst <= off_dst; s1_src <= off_src;
      s2_v <= s1_v; s2_dst <= AW'(a_dst); s2_src <= AW'(a_src);
      s3_v <= s2_v && two; s3_dst <= s2_dst; s3_a <= acc_rd_data;
      inflight <= inflight + (issue ? 16'd1 : 16'd0) - (wb_v ? 16'd1 : 16'd0);

      if (start && !busy) begin
        ins   <= insn;
        two   <= !insn.use_imm && !insn.reset;
        busy  <= 1'b1;
        gen   <= (insn.iter_out != 0) && (insn.iter_in != 0) && (insn.uop_end > {1'b0, insn.uop_bgn});
        phase <= 1'b0;
        i0 <= '0; i1 <= '0; u <= {1'b0, insn.uop_bgn};
        off_dst0 <= '0; off_src0 <= '0; off_dst <= '0; off_src <= '0;
      end else if (busy) begin
        if (done) busy <= 1'b0;
        if (gen && two) phase <= !phase;
        if (issue) begin
          if (!last_u) u <= u + 1'b1;
          else begin
            u <= {1'b0, ins.uop_bgn};
            if (!last_i1) begin
              i1 <= i1 + 1'b1;
              off_dst <= off_dst + 32'(ins.dst_fi);
              off_src <= off_src + 32'(ins.src_fi);
            end else begin
              i1 <= '0;
              off_dst  <= off_dst0 + 32'(ins.dst_fo);
              off_src  <= off_src0 + 32'(ins.src_fo);
              off_dst0 <= off_dst0 + 32'(ins.dst_fo);
              off_src0 <= off_src0 + 32'(ins.src_fo);
              if (!last_i0) i0 <= i0 + 1'b1;
              else          gen <= 1'b0;
            end
          end
        end
      end
    end
  end

  // the single read port is never asked for two reads in one cycle

endmodule
