// fetch: instruction fetch unit.
//
// After start it reads insn_count 128-bit instructions from DRAM byte address
// insn_addr (8-byte aligned) through its VME read client and dispatches each
// one, in program order, to one of three command queues:
//   LOAD of the input or weight buffer          -> load queue
//   LOAD of micro-ops or accumulators, GEMM, ALU, FINISH -> compute queue
//   STORE                                        -> store queue
// The instruction stream is treated as a sequence of 64-bit words: every bus
// beat (64..512 bits) is cut into 64-bit words and two words make one
// instruction, so only 64-bit alignment of the stream is needed.
//
// Reads are issued as bursts of up to BURST beats into a FB_DEPTH-beat
// reorder buffer; each request carries the buffer slot of its first beat as
// VME metadata, so bursts that complete out of order land in the right
// place. A request is issued only when the buffer has room for all its beats
// (data from the VME cannot be stalled). The consumer takes one 64-bit word
// per cycle from the head of the buffer and stalls while the target command
// queue is full. busy falls after the last instruction is dispatched.
// Timing: at best one instruction every two cycles.
// Dispatch targets follow the block diagram's placement of the buffers; the
// reorder buffer, burst size and 64-bit word assembly are this design's
// choices.
// Interface: start/insn_addr/insn_count from the host, one VME read client,
// valid/ready to the three command queues with a shared insn_out bus.
module fetch
  import vta_pkg::*;
#(
  parameter int unsigned BUS_BITS = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned FB_DEPTH = 16,
  parameter int unsigned BURST    = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic        start,
  input  logic [31:0] insn_addr,
  input  logic [31:0] insn_count,
  output logic        busy,
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
  // command queues
  output logic              ld_valid,
  input  logic              ld_ready,
  output logic              cmp_valid,
  input  logic              cmp_ready,
  output logic              st_valid,
  input  logic              st_ready,
  output logic [INSN_BITS-1:0] insn_out
);
  localparam int unsigned BUSB = BUS_BITS / 8;
  localparam int unsigned LB   = $clog2(BUSB);
  localparam int unsigned WPB  = BUS_BITS / 64;         // 64-bit words per beat
  localparam int unsigned LW   = (WPB > 1) ? $clog2(WPB) : 1;
  localparam int unsigned FW   = $clog2(FB_DEPTH);

  logic [31:0] first_beat, nbeats, issued, consumed, words_left;
  logic [LW-1:0] wpos;
  logic        half;
  logic [63:0] lo;

  logic [BUS_BITS-1:0] fb [FB_DEPTH];
  logic [FB_DEPTH-1:0] fb_v;

  // ---------------- request side ----------------
  logic [31:0] req_len;
  always_comb begin
    req_len = nbeats - issued;
    if (req_len > BURST) req_len = BURST;
  end
  assign rd_cmd_valid = busy && (issued < nbeats) && ((issued - consumed) + req_len <= FB_DEPTH);
  assign rd_cmd_addr  = (first_beat + issued) << LB;
  assign rd_cmd_len   = LEN_W'(req_len - 1);
  always_comb begin
    rd_cmd_meta = '0;
    rd_cmd_meta[FW-1:0] = FW'(issued);
  end

  // ---------------- consumer ----------------
  logic [FW-1:0] head;
  logic [63:0]   word;
  logic          word_v;
  insn_t         ins;
  mem_insn_t     mins;
  assign head   = FW'(consumed);
  assign word_v = busy && fb_v[head] && (words_left != 0);
  assign word   = fb[head][64*wpos +: 64];
  assign insn_out = {word, lo};
  assign ins    = insn_t'(insn_out);
  assign mins   = mem_insn_t'(insn_out);

  logic to_ld, to_st, to_cmp;
  always_comb begin
    to_ld  = (ins.opcode == OP_LOAD) && (mins.mem_type == MEM_INP || mins.mem_type == MEM_WGT);
    to_st  = (ins.opcode == OP_STORE);
    to_cmp = !to_ld && !to_st;
  end
  assign ld_valid  = word_v && half && to_ld;
  assign st_valid  = word_v && half && to_st;
  assign cmp_valid = word_v && half && to_cmp;

  logic take;   // word consumed this cycle
  assign take = word_v && (!half || (to_ld && ld_ready) || (to_st && st_ready) || (to_cmp && cmp_ready));

  logic beat_end;
  assign beat_end = (WPB == 1) || (wpos == LW'(WPB - 1)) || (words_left == 1);

  always_ff @(posedge clk) begin
    if (rd_data_valid)
      fb[FW'(rd_data_meta[FW-1:0] + FW'(rd_data_beat))] <= rd_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; first_beat <= '0; nbeats <= '0; issued <= '0; consumed <= '0;
      words_left <= '0; wpos <= '0; half <= 1'b0; lo <= '0; fb_v <= '0;
    end else begin
      if (start && !busy) begin
        busy       <= (insn_count != 0);
        first_beat <= insn_addr >> LB;
        nbeats     <= ((insn_addr + (insn_count << 4) - 1) >> LB) - (insn_addr >> LB) + 1;
        issued     <= '0;
        consumed   <= '0;
        words_left <= insn_count << 1;
        wpos       <= (WPB > 1) ? LW'(insn_addr >> 3) : '0;
        half       <= 1'b0;
        fb_v       <= '0;
      end else if (busy) begin
        if (rd_cmd_valid && rd_cmd_ready) issued <= issued + req_len;
        if (rd_data_valid) fb_v[FW'(rd_data_meta[FW-1:0] + FW'(rd_data_beat))] <= 1'b1;
        if (take) begin
          half       <= !half;
          lo         <= word;
          words_left <= words_left - 1;
          if (beat_end) begin
            fb_v[head] <= 1'b0;
            consumed   <= consumed + 1;
            wpos       <= '0;
          end else begin
            wpos <= wpos + 1'b1;
          end
          if (words_left == 1) busy <= 1'b0;
        end
      end
    end
  end

endmodule
