// tl_harness: one tensor_load wired through the vme to the DRAM model and
// into a tensor_sram, driven with random LOAD instructions (random tile size,
// stride, padding on all four sides, pad select) and compared tensor by
// tensor with a reference computed from the DRAM contents. Also runs a
// padding-only load and checks the filler writes one tensor per cycle.
// Parameterised on tensor width and bus width so the same harness covers
// the narrow mode (tensor wider than the bus) and the wide mode.
// Interface: clk in; checks/failures/yields/fin out.
module tl_harness #(
  parameter int unsigned TBITS = 128,
  parameter int unsigned BUS   = 64,
  parameter int unsigned ELEM  = 8,
  parameter int unsigned NINSN = 12,
  parameter int unsigned SEED  = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   yields,
  output logic fin
);
  import vta_pkg::*;
  localparam int unsigned BLK = (TBITS < BUS) ? TBITS : BUS;
  localparam int unsigned NBLK = TBITS / BLK, NL = BUS / BLK, DEPTH = 2048;
  localparam int unsigned TB = TBITS / 8, WORDS = 8192;
  logic rst_n;

  logic start, busy, done, pad_yield;
  mem_insn_t insn;
  logic [4:0] rcv, rcr, rdv;
  logic [4:0][31:0] rca; logic [4:0][7:0] rcl; logic [4:0][31:0] rcm;
  logic [BUS-1:0] rd_data; logic [31:0] rd_data_meta; logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [BUS-1:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [BUS-1:0] w_data; logic [BUS/8-1:0] w_strb;
  logic wr_cmd_ready, wr_data_ready, wr_ack;
  logic [3:0] inflight;

  vme #(.NCLIENT(5), .NUM_TAGS(8), .BUS_BITS(BUS)) u_vme (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd_ready(rcr), .rd_cmd_addr(rca), .rd_cmd_len(rcl),
    .rd_cmd_meta(rcm), .rd_data_valid(rdv), .rd_data, .rd_data_meta, .rd_data_beat,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .wr_cmd_valid(1'b0), .wr_cmd_ready, .wr_cmd_addr(32'd0), .wr_cmd_len(8'd0),
    .wr_data_valid(1'b0), .wr_data_ready, .wr_data('0), .wr_strb('0), .wr_ack,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_strb, .w_last,
    .b_valid, .b_ready, .inflight);
  dram_model #(.BUS_BITS(BUS), .TW(3), .WORDS(WORDS), .LAT(5), .MAX_OUT(8)) u_mem (.*);

  logic [NL-1:0] wv, wa; logic [NL-1:0][10:0] wi; logic [NL-1:0][$clog2(NBLK+1)-1:0] wb;
  logic [NL-1:0][BLK-1:0] wd;
  assign rcv[4:1] = '0; assign rca[4:1] = '0; assign rcl[4:1] = '0; assign rcm[4:1] = '0;
  tensor_load #(.TBITS(TBITS), .BUS_BITS(BUS), .DEPTH(DEPTH), .ELEM_BITS(ELEM)) dut (
    .clk, .rst_n, .start, .insn, .busy, .done,
    .rd_cmd_valid(rcv[0]), .rd_cmd_ready(rcr[0]), .rd_cmd_addr(rca[0]), .rd_cmd_len(rcl[0]),
    .rd_cmd_meta(rcm[0]), .rd_data_valid(rdv[0]), .rd_data, .rd_data_meta, .rd_data_beat,
    .wr_valid(wv), .wr_all(wa), .wr_idx(wi), .wr_blk(wb), .wr_data(wd), .pad_yield);
  logic [TBITS-1:0] sram_q; logic sram_fwd;
  tensor_sram #(.DEPTH(DEPTH), .TBITS(TBITS), .BLKBITS(BLK), .NLANES(NL)) u_sram (
    .clk, .wr_valid(wv), .wr_all(wa), .wr_idx(wi), .wr_blk(wb), .wr_data(wd),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(1'b0), .rd_idx('0),
    .rd_data(sram_q), .rd_fwd(sram_fwd));

  always @(posedge clk) if (pad_yield) yields++;

  function automatic logic [TBITS-1:0] sram_t(int i);
    return TBITS'(u_sram.mem[i]);
  endfunction
  function automatic logic [TBITS-1:0] dram_t(int t);
    logic [TBITS-1:0] v;
    for (int b = 0; b < TB; b++) v[b*8 +: 8] = u_mem.read_byte(t * TB + b);
    return v;
  endfunction

  task automatic run(input mem_insn_t i, output int cyc);
    @(negedge clk); insn = i; start = 1; cyc = 0;
    @(negedge clk); start = 0;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  task automatic check_tile(input mem_insn_t i);
    int w = int'(i.x_pad_0) + int'(i.x_size) + int'(i.x_pad_1);
    int h = int'(i.y_pad_0) + int'(i.y_size) + int'(i.y_pad_1);
    logic [TBITS-1:0] pad, exp;
    for (int e = 0; e < TBITS / ELEM; e++) pad[e*ELEM +: ELEM] = i.pad_sel ? {1'b1, {(ELEM-1){1'b0}}} : '0;
    for (int r = 0; r < h; r++)
      for (int c = 0; c < w; c++) begin
        int ry = r - int'(i.y_pad_0), cx = c - int'(i.x_pad_0);
        if (ry >= 0 && ry < int'(i.y_size) && cx >= 0 && cx < int'(i.x_size))
          exp = dram_t(int'(i.dram_base) + ry * int'(i.x_stride) + cx);
        else exp = pad;
        checks++;
        if (sram_t(int'(i.sram_base) + r * w + c) !== exp) begin
          failures++;
          if (failures < 6) $display("tl T%0d B%0d: (%0d,%0d) mismatch", TBITS, BUS, r, c);
        end
      end
  endtask

  initial begin
    mem_insn_t i; int cyc;
    checks = 0; failures = 0; yields = 0; fin = 0; start = 0; insn = '0; rst_n = 0;
    void'($urandom(SEED));
    for (int k = 0; k < WORDS; k++) u_mem.mem[k] = {BUS/32{$urandom}};
    for (int k = 0; k < DEPTH; k++) u_sram.mem[k] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < NINSN; n++) begin
      i = '0;
      i.opcode = OP_LOAD; i.mem_type = MEM_INP;
      i.x_size = 16'(1 + $urandom % 9); i.y_size = 16'(1 + $urandom % 5);
      i.x_stride = i.x_size + 16'($urandom % 4);
      i.x_pad_0 = 4'($urandom % 3); i.x_pad_1 = 4'($urandom % 3);
      i.y_pad_0 = 4'($urandom % 3); i.y_pad_1 = 4'($urandom % 3);
      if (n == 0) begin i.x_pad_0 = 0; i.x_pad_1 = 0; i.y_pad_0 = 0; i.y_pad_1 = 0; end
      if (n == 1) begin i.x_size = 16'(300); i.x_stride = 16'(300); i.y_size = 2; end   // multi-request rows
      i.pad_sel = 4'($urandom % 2);
      i.sram_base = 13'($urandom % 200);
      i.dram_base = 32'($urandom % 300);
      run(i, cyc);
      check_tile(i);
    end
    // padding only: 6x5 tensors of pad, one per cycle
    i = '0; i.opcode = OP_LOAD; i.x_pad_0 = 3; i.x_pad_1 = 3; i.y_pad_0 = 2; i.y_pad_1 = 3;
    i.pad_sel = 1; i.sram_base = 13'(1500);
    run(i, cyc);
    check_tile(i);
    checks++;
    if (cyc > 6 * 5 + 2) begin failures++; $display("pad-only took %0d cycles", cyc); end
    fin = 1;
  end
endmodule
