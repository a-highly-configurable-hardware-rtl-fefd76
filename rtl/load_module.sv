// load_module: executes LOAD instructions for the input and weight buffers.
//
// Each instruction taken from the load command queue goes through four steps:
//   1. take it from the queue;
//   2. wait while pop_next is set and the CMP->LD queue holds no token, then
//      remove that token (the compute module has released the buffer area);
//   3. run the tensor load of the input or weight buffer, chosen by
//      mem_type, until it reports done;
//   4. wait while push_next is set and the LD->CMP queue is full, then insert
//      a token (the data is ready for compute).
// The load module sits leftmost, so it has no "prev" queues and ignores
// pop_prev/push_prev. Other memory types are not expected here (the fetch
// unit sends them to compute) and are completed without effect.
// Interface: one VME read client and one scratchpad write port per buffer.
// The pop-execute-push order follows the dependency scheme of the design.
// Timing: a token check takes one cycle, then the tensor load runs; the
// push takes one cycle, so an instruction costs its load time plus ~3 cycles.
module load_module
  import vta_pkg::*;
#(
  parameter int unsigned BATCH     = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_IN  = vta_pkg::CFG_BLOCK_IN,
  parameter int unsigned BLOCK_OUT = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned BUS_BITS  = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned INP_DEPTH = 8192,
  parameter int unsigned WGT_DEPTH = 8192,
  localparam int unsigned INP_T  = BATCH * BLOCK_IN * 8,
  localparam int unsigned WGT_T  = BLOCK_OUT * BLOCK_IN * 8,
  localparam int unsigned IBLK   = (INP_T < BUS_BITS) ? INP_T : BUS_BITS,
  localparam int unsigned WBLK   = (WGT_T < BUS_BITS) ? WGT_T : BUS_BITS,
  localparam int unsigned ILANES = BUS_BITS / IBLK,
  localparam int unsigned WLANES = BUS_BITS / WBLK,
  localparam int unsigned IBW    = $clog2(INP_T / IBLK + 1),
  localparam int unsigned WBW    = $clog2(WGT_T / WBLK + 1),
  localparam int unsigned IAW    = $clog2(INP_DEPTH),
  localparam int unsigned WAW    = $clog2(WGT_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  // command queue
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [INSN_BITS-1:0] cmd_data,
  // dependency queues
  input  logic cmp2ld_has,
  output logic cmp2ld_pop,
  input  logic ld2cmp_can,
  output logic ld2cmp_push,
  // VME clients: [0] input, [1] weight
  output logic [1:0]             rd_cmd_valid,
  input  logic [1:0]             rd_cmd_ready,
  output logic [1:0][31:0]       rd_cmd_addr,
  output logic [1:0][LEN_W-1:0]  rd_cmd_len,
  output logic [1:0][META_W-1:0] rd_cmd_meta,
  input  logic [1:0]             rd_data_valid,
  input  logic [BUS_BITS-1:0]    rd_data,
  input  logic [META_W-1:0]      rd_data_meta,
  input  logic [LEN_W-1:0]       rd_data_beat,
  // input buffer writes
  output logic [ILANES-1:0]             inp_wr_valid,
  output logic [ILANES-1:0]             inp_wr_all,
  output logic [ILANES-1:0][IAW-1:0]    inp_wr_idx,
  output logic [ILANES-1:0][IBW-1:0]    inp_wr_blk,
  output logic [ILANES-1:0][IBLK-1:0]   inp_wr_data,
  // weight buffer writes
  output logic [WLANES-1:0]             wgt_wr_valid,
  output logic [WLANES-1:0]             wgt_wr_all,
  output logic [WLANES-1:0][WAW-1:0]    wgt_wr_idx,
  output logic [WLANES-1:0][WBW-1:0]    wgt_wr_blk,
  output logic [WLANES-1:0][WBLK-1:0]   wgt_wr_data,
  output logic busy,
  output logic [1:0] pad_yield
);
  typedef enum logic [1:0] {S_IDLE, S_POP, S_EXEC, S_PUSH} state_t;
  state_t    st;
  mem_insn_t ins;
  logic      is_inp, is_wgt, started;
  logic      inp_busy, inp_done, wgt_busy, wgt_done, exec_done;

  assign is_inp = (ins.mem_type == MEM_INP);
  assign is_wgt = (ins.mem_type == MEM_WGT);
  assign busy   = (st != S_IDLE);

  assign cmd_ready   = (st == S_IDLE);
  assign cmp2ld_pop  = (st == S_POP) && ins.dep.pop_next && cmp2ld_has;
  assign ld2cmp_push = (st == S_PUSH) && ins.dep.push_next && ld2cmp_can;
  assign exec_done   = started && ((is_inp && inp_done) || (is_wgt && wgt_done) || (!is_inp && !is_wgt));

  logic go;
  assign go = (st == S_EXEC) && !started;

  tensor_load #(.TBITS(INP_T), .BUS_BITS(BUS_BITS), .DEPTH(INP_DEPTH), .ELEM_BITS(8)) u_inp (
    .clk, .rst_n, .start(go && is_inp), .insn(ins), .busy(inp_busy), .done(inp_done),
    .rd_cmd_valid(rd_cmd_valid[0]), .rd_cmd_ready(rd_cmd_ready[0]), .rd_cmd_addr(rd_cmd_addr[0]),
    .rd_cmd_len(rd_cmd_len[0]), .rd_cmd_meta(rd_cmd_meta[0]),
    .rd_data_valid(rd_data_valid[0]), .rd_data, .rd_data_meta, .rd_data_beat,
    .wr_valid(inp_wr_valid), .wr_all(inp_wr_all), .wr_idx(inp_wr_idx), .wr_blk(inp_wr_blk),
    .wr_data(inp_wr_data), .pad_yield(pad_yield[0]));

  tensor_load #(.TBITS(WGT_T), .BUS_BITS(BUS_BITS), .DEPTH(WGT_DEPTH), .ELEM_BITS(8)) u_wgt (
    .clk, .rst_n, .start(go && is_wgt), .insn(ins), .busy(wgt_busy), .done(wgt_done),
    .rd_cmd_valid(rd_cmd_valid[1]), .rd_cmd_ready(rd_cmd_ready[1]), .rd_cmd_addr(rd_cmd_addr[1]),
    .rd_cmd_len(rd_cmd_len[1]), .rd_cmd_meta(rd_cmd_meta[1]),
    .rd_data_valid(rd_data_valid[1]), .rd_data, .rd_data_meta, .rd_data_beat,
    .wr_valid(wgt_wr_valid), .wr_all(wgt_wr_all), .wr_idx(wgt_wr_idx), .wr_blk(wgt_wr_blk),
    .wr_data(wgt_wr_data), .pad_yield(pad_yield[1]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; started <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          ins <= mem_insn_t'(cmd_data);
          st  <= S_POP;
        end
        S_POP: if (!ins.dep.pop_next || cmp2ld_has) begin
          st <= S_EXEC;
          started <= 1'b0;
        end
        S_EXEC: begin
          started <= 1'b1;
          if (exec_done) st <= S_PUSH;
        end
        S_PUSH: if (!ins.dep.push_next || ld2cmp_can) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
