// tb_load_module: load_module with input and weight buffers, the vme and the
// out-of-order DRAM model. Sends LOAD instructions for both buffers (random
// tiles, padding on the input loads) with pop_next/push_next set. The
// compute-to-load token is withheld for a while: the testbench checks that
// no DRAM read is issued and nothing is written before the token is given,
// that the load-to-compute token is pushed once the whole tile is in the
// buffer, and compares every loaded tensor with DRAM. A LOAD of another
// memory type must finish without touching either buffer. Both buffers' VME
// clients must be used.
// Interface: none (self-contained). Timing: token withheld for 15 cycles.
module tb_load_module;
  import vta_pkg::*;
  localparam int BI = 16, BO = 16, D = 8192, WORDS = 16384;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cmd_valid, cmd_ready, has, pop, push, busy;
  logic [127:0] cmd_data;
  logic [1:0] pad_yield;
  logic [4:0] rcv, rcr, rdv;
  logic [4:0][31:0] rca; logic [4:0][7:0] rcl; logic [4:0][31:0] rcm;
  logic [63:0] rd_data; logic [31:0] rd_data_meta; logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [63:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [63:0] w_data; logic [7:0] w_strb;
  logic wr_cmd_ready, wr_data_ready, wr_ack; logic [3:0] inflight;
  logic iv, ia, wv, wa; logic [12:0] ii, wi; logic [1:0] ib; logic [5:0] wb;
  logic [63:0] id, wd;

  vme #(.NCLIENT(5), .NUM_TAGS(8), .BUS_BITS(64)) u_vme (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd_ready(rcr), .rd_cmd_addr(rca), .rd_cmd_len(rcl),
    .rd_cmd_meta(rcm), .rd_data_valid(rdv), .rd_data, .rd_data_meta, .rd_data_beat,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .wr_cmd_valid(1'b0), .wr_cmd_ready, .wr_cmd_addr(32'd0), .wr_cmd_len(8'd0),
    .wr_data_valid(1'b0), .wr_data_ready, .wr_data('0), .wr_strb('0), .wr_ack,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_strb, .w_last,
    .b_valid, .b_ready, .inflight);
  dram_model #(.BUS_BITS(64), .TW(3), .WORDS(WORDS), .LAT(5), .MAX_OUT(8)) u_mem (.*);
  assign rcv[1:0] = '0; assign rca[1:0] = '0; assign rcl[1:0] = '0; assign rcm[1:0] = '0;
  assign rcv[4] = 1'b0; assign rca[4] = '0; assign rcl[4] = '0; assign rcm[4] = '0;

  load_module dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .cmp2ld_has(has), .cmp2ld_pop(pop), .ld2cmp_can(1'b1), .ld2cmp_push(push),
    .rd_cmd_valid(rcv[3:2]), .rd_cmd_ready(rcr[3:2]), .rd_cmd_addr(rca[3:2]), .rd_cmd_len(rcl[3:2]),
    .rd_cmd_meta(rcm[3:2]), .rd_data_valid(rdv[3:2]), .rd_data, .rd_data_meta, .rd_data_beat,
    .inp_wr_valid(iv), .inp_wr_all(ia), .inp_wr_idx(ii), .inp_wr_blk(ib), .inp_wr_data(id),
    .wgt_wr_valid(wv), .wgt_wr_all(wa), .wgt_wr_idx(wi), .wgt_wr_blk(wb), .wgt_wr_data(wd),
    .busy, .pad_yield);
  logic [127:0] iq; logic [2047:0] wq; logic f0, f1;
  tensor_sram #(.DEPTH(D), .TBITS(128), .BLKBITS(64)) u_inp (.clk, .wr_valid(iv), .wr_all(ia), .wr_idx(ii), .wr_blk(ib), .wr_data(id),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(1'b0), .rd_idx('0), .rd_data(iq), .rd_fwd(f0));
  tensor_sram #(.DEPTH(D), .TBITS(2048), .BLKBITS(64)) u_wgt (.clk, .wr_valid(wv), .wr_all(wa), .wr_idx(wi), .wr_blk(wb), .wr_data(wd),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(1'b0), .rd_idx('0), .rd_data(wq), .rd_fwd(f1));

  logic token, token_given;
  int early = 0, pushes = 0, writes = 0, inp_reads = 0, wgt_reads = 0;
  assign has = token;
  always @(posedge clk) if (rst_n) begin
    if (ar_valid && !token_given) early++;
    if (push) pushes++;
    if (iv != 0 || wv != 0) writes++;
    if (rcv[2] && rcr[2]) inp_reads++;
    if (rcv[3] && rcr[3]) wgt_reads++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] sb(input mem_type_t mt, int idx, int byt);
    if (mt == MEM_INP) return u_inp.mem[idx][byt / 8][(byt % 8) * 8 +: 8];
    return u_wgt.mem[idx][byt / 8][(byt % 8) * 8 +: 8];
  endfunction

  initial begin
    mem_insn_t m; int p0, w0, tb_, w, h;
    cmd_valid = 0; cmd_data = '0; token = 0; token_given = 0;
    for (int k = 0; k < WORDS; k++) u_mem.mem[k] = {$urandom, $urandom};
    for (int k = 0; k < D; k++) begin u_inp.mem[k] = '0; u_wgt.mem[k] = '0; end
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 9; n++) begin
      m = '0; m.opcode = OP_LOAD; m.dep.pop_next = 1; m.dep.push_next = 1;
      m.mem_type = (n % 3 == 0) ? MEM_INP : (n % 3 == 1) ? MEM_WGT : MEM_OUT;
      m.x_size = 16'(1 + $urandom % 6); m.y_size = 16'(1 + $urandom % 3);
      m.x_stride = m.x_size + 16'($urandom % 3);
      if (m.mem_type == MEM_INP) begin
        m.x_pad_0 = 4'($urandom % 2); m.x_pad_1 = 4'($urandom % 2); m.y_pad_0 = 1; m.y_pad_1 = 4'($urandom % 2);
      end
      m.sram_base = 13'($urandom % 1000); m.dram_base = 32'($urandom % 100);
      tb_ = (m.mem_type == MEM_WGT) ? 256 : 16;
      w = int'(m.x_pad_0) + int'(m.x_size) + int'(m.x_pad_1);
      h = int'(m.y_pad_0) + int'(m.y_size) + int'(m.y_pad_1);
      p0 = pushes; w0 = writes; token_given = 0; early = 0;
      @(negedge clk); cmd_valid = 1; cmd_data = m;
      do @(posedge clk); while (!cmd_ready); #1 cmd_valid = 0;
      repeat (15) @(negedge clk);
      checks++; if (early != 0 || pushes != p0 || writes != w0) begin failures++; $display("load started before its token"); end
      token = 1; token_given = 1;
      do @(posedge clk); while (!pop); #1 token = 0;
      while (pushes == p0) @(negedge clk);
      if (m.mem_type == MEM_OUT) begin
        checks++; if (writes != w0) begin failures++; $display("other memory type wrote a buffer"); end
        continue;
      end
      for (int r = 0; r < h; r++) for (int c = 0; c < w; c++) for (int b = 0; b < tb_; b++) begin
        automatic int ry = r - int'(m.y_pad_0), cx = c - int'(m.x_pad_0);
        automatic logic [7:0] exp = 8'h00;
        if (ry >= 0 && ry < int'(m.y_size) && cx >= 0 && cx < int'(m.x_size))
          exp = u_mem.read_byte((int'(m.dram_base) + ry * int'(m.x_stride) + cx) * tb_ + b);
        checks++;
        if (sb(m.mem_type, int'(m.sram_base) + r * w + c, b) !== exp) begin
          failures++; if (failures < 6) $display("n%0d tensor (%0d,%0d) byte %0d wrong", n, r, c, b);
        end
      end
      repeat (2) @(negedge clk);
    end
    checks++; if (pushes != 9) begin failures++; $display("pushes %0d", pushes); end
    checks++; if (inp_reads == 0 || wgt_reads == 0) begin failures++; $display("a VME client was never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
