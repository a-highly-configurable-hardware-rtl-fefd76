// tensor_load: executes one LOAD instruction into one scratchpad.
//
// A LOAD describes a 2-D tile: y_size rows of x_size tensors, consecutive
// rows x_stride tensors apart in DRAM, surrounded in the scratchpad by
// y_pad_0/y_pad_1 rows and x_pad_0/x_pad_1 columns of padding. The tile is
// written row-major starting at sram_base with row pitch
// x_pad_0 + x_size + x_pad_1.
//
// Three cooperating parts run concurrently:
//   * command generator: one VME read request per row (split into chunks of
//     at most 256 beats), carrying the destination index as metadata;
//   * in-flight counter: + burst length on each accepted request, -1 on each
//     returned beat; the load cannot finish while it is non-zero;
//   * VME reader / padding filler: returned beats are written straight into
//     the scratchpad at the index recovered from the metadata; padding tensors
//     are written by the filler only in cycles with no returned beat
//     ("canWrite = !fire"), so the two never compete for the write port.
// Two transfer modes, chosen by parameters:
//   narrow (tensor wider than the bus): NBLK = TBITS/BUS_BITS beats per
//     tensor, each beat written as one block of the tensor;
//   wide   (bus wider than the tensor): TPB = BUS_BITS/TBITS tensors per beat,
//     written through TPB lanes in one cycle; the first beat of a request
//     starts at the bus-aligned address and lanes outside the request are
//     masked.
// The ratio of the two widths must be a power of two. Pad value is zero, or
// the most negative ELEM_BITS value when pad_sel is set (max pooling).
// done pulses for one cycle when all data and padding are written.
// Structure (generator, in-flight counter, reader, padding filler that yields
// to the reader) follows the design; chunk size, metadata format and the
// pad-select encoding are this design's choices.
// Interface: start/insn/busy/done, one VME read client, NLANES scratchpad
// block-write lanes, pad_yield for statistics.
module tensor_load
  import vta_pkg::*;
#(
  parameter int unsigned TBITS     = 128,
  parameter int unsigned BUS_BITS  = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned DEPTH     = 8192,
  parameter int unsigned ELEM_BITS = 8,
  localparam int unsigned BLK    = (TBITS < BUS_BITS) ? TBITS : BUS_BITS,
  localparam int unsigned NBLK   = TBITS / BLK,
  localparam int unsigned NLANES = BUS_BITS / BLK,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned BW     = $clog2(NBLK + 1),
  localparam int unsigned TBYTES = TBITS / 8,
  localparam int unsigned BUSB   = BUS_BITS / 8,
  localparam int unsigned LNBLK  = $clog2(NBLK),
  localparam int unsigned LTPB   = $clog2(NLANES),
  localparam int unsigned CH     = (NLANES > 1) ? 256 : 256 / NBLK   // tensors per request
) (
  input  logic clk,
  input  logic rst_n,
  input  logic      start,
  input  mem_insn_t insn,
  output logic      busy,
  output logic      done,
  // VME read client
  output logic              rd_cmd_valid,
  input  logic              rd_cmd_ready,
  output logic [31:0]       rd_cmd_addr,
  output logic [LEN_W-1:0]  rd_cmd_len,
  output logic [META_W-1:0] rd_cmd_meta,
  input  logic              rd_data_valid,
  input  logic [BUS_BITS-1:0] rd_data,
  input  logic [META_W-1:0] rd_data_meta,
  input  logic [LEN_W-1:0]  rd_data_beat,
  // scratchpad block write lanes
  output logic [NLANES-1:0]             wr_valid,
  output logic [NLANES-1:0]             wr_all,
  output logic [NLANES-1:0][AW-1:0]     wr_idx,
  output logic [NLANES-1:0][BW-1:0]     wr_blk,
  output logic [NLANES-1:0][BLK-1:0]    wr_data,
  // statistics: a padding tensor was held back by a data beat this cycle
  output logic pad_yield
);
  mem_insn_t ins;
  logic [31:0] W;        // row pitch in tensors
  logic [31:0] H;        // rows including padding

  // ---------------- command generator ----------------
  logic        gen_done;
  logic [15:0] gy, gx;
  logic [31:0] g_row_dram;    // dram tensor address of row gy
  logic [31:0] g_row_dst;     // scratchpad index of tensor (gy, 0)
  logic [31:0] g_n;           // tensors in this request
  logic [31:0] g_t;           // dram tensor address of this request
  logic [31:0] g_beats;

  always_comb begin
    g_n = 32'(ins.x_size) - 32'(gx);
    if (g_n > CH) g_n = CH;
    g_t = g_row_dram + 32'(gx);
    if (NLANES > 1) begin
      g_beats      = ((g_t & (NLANES - 1)) + g_n + NLANES - 1) >> LTPB;
      rd_cmd_addr  = (g_t >> LTPB) * BUSB;
    end else begin
      g_beats      = g_n << LNBLK;
      rd_cmd_addr  = g_t * TBYTES;
    end
    rd_cmd_len = LEN_W'(g_beats - 1);
    rd_cmd_meta = '0;
    rd_cmd_meta[15:0]  = 16'(g_row_dst + 32'(gx));
    rd_cmd_meta[20:16] = 5'(g_t & (NLANES - 1));
    rd_cmd_meta[28:21] = 8'(g_n - 1);
  end
  assign rd_cmd_valid = busy && !gen_done;

  // ---------------- in-flight counter ----------------
  logic [15:0] inflight;

  // ---------------- VME reader ----------------
  logic        pad_done;
  logic [31:0] pr, pc, p_idx;
  logic        p_in_data, pad_wr, can_write;
  logic [BLK-1:0] pad_blk;
  vme_meta_t dmeta;
  assign dmeta = vme_meta_t'(rd_data_meta);

  logic [NLANES-1:0] data_wr;
  always_comb begin
    data_wr = '0;
    for (int j = 0; j < NLANES; j++) begin
      wr_valid[j] = 1'b0;
      wr_all[j]   = 1'b0;
      wr_idx[j]   = '0;
      wr_blk[j]   = '0;
      wr_data[j]  = rd_data[j*BLK +: BLK];
    end
    if (rd_data_valid && busy) begin
      if (NLANES == 1) begin
        data_wr[0]  = 1'b1;
        wr_idx[0]   = AW'(32'(dmeta.idx) + (32'(rd_data_beat) >> LNBLK));
        wr_blk[0]   = BW'(32'(rd_data_beat) & (NBLK - 1));
      end else begin
        for (int j = 0; j < NLANES; j++) begin
          int m;
          m = int'(rd_data_beat) * NLANES + j - int'(dmeta.off);
          data_wr[j] = (m >= 0) && (m <= int'(dmeta.n_m1));
          wr_idx[j]  = AW'(32'(dmeta.idx) + 32'(m));
        end
      end
    end
    wr_valid = data_wr;
    if (pad_wr) begin
      wr_valid[0] = 1'b1;
      wr_all[0]   = 1'b1;
      wr_idx[0]   = AW'(p_idx);
      wr_data[0]  = pad_blk;
    end
  end

  // ---------------- padding filler ----------------

  always_comb begin
    for (int e = 0; e < BLK / ELEM_BITS; e++)
      pad_blk[e*ELEM_BITS +: ELEM_BITS] = ins.pad_sel ? {1'b1, {(ELEM_BITS-1){1'b0}}} : '0;
  end

  assign can_write = !(rd_data_valid && busy);
  assign p_in_data = (pr >= 32'(ins.y_pad_0)) && (pr < 32'(ins.y_pad_0) + 32'(ins.y_size)) &&
                     (pc >= 32'(ins.x_pad_0)) && (pc < 32'(ins.x_pad_0) + 32'(ins.x_size));
  assign pad_wr    = busy && !pad_done && !p_in_data && can_write;
  assign pad_yield = busy && !pad_done && !p_in_data && !can_write;

  // ---------------- control ----------------
  assign done = busy && gen_done && pad_done && (inflight == 0) && !start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      gen_done <= 1'b1;
      pad_done <= 1'b1;
      inflight <= '0;
      ins      <= '0;
      W <= '0; H <= '0;
      gy <= '0; gx <= '0; g_row_dram <= '0; g_row_dst <= '0;
      pr <= '0; pc <= '0; p_idx <= '0;
    end else begin
      // in-flight beats
      inflight <= inflight + ((rd_cmd_valid && rd_cmd_ready) ? 16'(g_beats) : 16'd0)
                           - ((rd_data_valid && busy) ? 16'd1 : 16'd0);
      if (start && !busy) begin
        automatic logic [31:0] w = 32'(insn.x_pad_0) + 32'(insn.x_size) + 32'(insn.x_pad_1);
        automatic logic [31:0] h = 32'(insn.y_pad_0) + 32'(insn.y_size) + 32'(insn.y_pad_1);
        ins        <= insn;
        W          <= w;
        H          <= h;
        busy       <= 1'b1;
        gen_done   <= (insn.x_size == 0) || (insn.y_size == 0);
        pad_done   <= (w == 32'(insn.x_size)) && (h == 32'(insn.y_size));
        gy <= '0; gx <= '0;
        g_row_dram <= insn.dram_base;
        g_row_dst  <= 32'(insn.sram_base) + 32'(insn.y_pad_0) * w + 32'(insn.x_pad_0);
        pr <= '0; pc <= '0;
        p_idx <= 32'(insn.sram_base);
      end else if (busy) begin
        if (done) busy <= 1'b0;
        // command generator
        if (rd_cmd_valid && rd_cmd_ready) begin
          if (32'(gx) + g_n >= 32'(ins.x_size)) begin
            gx <= '0;
            gy <= gy + 1'b1;
            g_row_dram <= g_row_dram + 32'(ins.x_stride);
            g_row_dst  <= g_row_dst + W;
            if (gy + 1'b1 == ins.y_size) gen_done <= 1'b1;
          end else begin
            gx <= gx + 16'(g_n);
          end
        end
        // padding filler: skip the data span of a row, write pad elsewhere
        if (!pad_done) begin
          if (p_in_data) begin
            p_idx <= p_idx + 32'(ins.x_size);
            if (ins.x_pad_1 == 0) begin
              pc <= '0;
              pr <= pr + 1;
              if (pr == H - 1) pad_done <= 1'b1;
            end else begin
              pc <= pc + 32'(ins.x_size);
            end
          end else if (pad_wr) begin
            p_idx <= p_idx + 1;
            if (pc == W - 1) begin
              pc <= '0;
              pr <= pr + 1;
              if (pr == H - 1) pad_done <= 1'b1;
            end else begin
              pc <= pc + 1;
            end
          end
        end
      end
    end
  end

  initial begin
    assert ((NBLK & (NBLK - 1)) == 0 && (NLANES & (NLANES - 1)) == 0)
      else $error("tensor_load: width ratio must be a power of two");
    assert (NBLK <= 256) else $error("tensor_load: tensor too wide for one burst");
  end

endmodule
