// tb_fetch: fetch unit reading a random instruction stream from the
// out-of-order DRAM model through the vme. Each command queue consumer is
// ready at random; the testbench checks that every instruction reaches the
// right queue (load: LOAD of input/weight; store: STORE; compute: all
// others), in program order, exactly once, and that busy falls afterwards.
// A third run with all consumers always ready checks that dispatch keeps up
// with the memory: once the last data beat arrives the buffer (at most one
// out-of-order burst of 4 beats plus the beat itself) drains at one 64-bit
// word per cycle, so the last instruction leaves within 11 cycles.
// Interface: none (self-contained).
module tb_fetch;
  import vta_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy;
  logic [31:0] insn_addr, insn_count;
  logic [4:0] rcv, rcr, rdv;
  logic [4:0][31:0] rca; logic [4:0][7:0] rcl; logic [4:0][31:0] rcm;
  logic [63:0] rd_data; logic [31:0] rd_data_meta; logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [63:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [63:0] w_data; logic [7:0] w_strb;
  logic wr_cmd_ready, wr_data_ready, wr_ack; logic [3:0] inflight;
  logic ld_valid, ld_ready, cmp_valid, cmp_ready, st_valid, st_ready;
  logic [127:0] insn_out;

  vme #(.NCLIENT(5), .NUM_TAGS(8), .BUS_BITS(64)) u_vme (
    .clk, .rst_n, .rd_cmd_valid(rcv), .rd_cmd_ready(rcr), .rd_cmd_addr(rca), .rd_cmd_len(rcl),
    .rd_cmd_meta(rcm), .rd_data_valid(rdv), .rd_data, .rd_data_meta, .rd_data_beat,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .wr_cmd_valid(1'b0), .wr_cmd_ready, .wr_cmd_addr(32'd0), .wr_cmd_len(8'd0),
    .wr_data_valid(1'b0), .wr_data_ready, .wr_data('0), .wr_strb('0), .wr_ack,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_strb, .w_last,
    .b_valid, .b_ready, .inflight);
  dram_model #(.BUS_BITS(64), .TW(3), .WORDS(4096), .LAT(5), .MAX_OUT(8)) u_mem (.*);
  assign rcv[4:1] = '0; assign rca[4:1] = '0; assign rcl[4:1] = '0; assign rcm[4:1] = '0;
  fetch dut (.clk, .rst_n, .start, .insn_addr, .insn_count, .busy,
    .rd_cmd_valid(rcv[0]), .rd_cmd_ready(rcr[0]), .rd_cmd_addr(rca[0]), .rd_cmd_len(rcl[0]),
    .rd_cmd_meta(rcm[0]), .rd_data_valid(rdv[0]), .rd_data, .rd_data_meta, .rd_data_beat,
    .ld_valid, .ld_ready, .cmp_valid, .cmp_ready, .st_valid, .st_ready, .insn_out);

  logic [127:0] q_ld [$], q_cmp [$], q_st [$];
  int got = 0, cyc_now = 0, last_beat = 0, last_disp = 0;
  always @(posedge clk) begin
    cyc_now++;
    if (rdv[0]) last_beat = cyc_now;
    if ((ld_valid && ld_ready) || (cmp_valid && cmp_ready) || (st_valid && st_ready)) last_disp = cyc_now;
  end
  bit rnd_ready = 1;

  always @(negedge clk) begin
    ld_ready  = rnd_ready ? ($urandom % 3 != 0) : 1'b1;
    cmp_ready = rnd_ready ? ($urandom % 3 != 0) : 1'b1;
    st_ready  = rnd_ready ? ($urandom % 3 != 0) : 1'b1;
  end
  always @(posedge clk) if (rst_n) begin
    if ((ld_valid + cmp_valid + st_valid) > 1) begin failures++; $display("two queues at once"); end
    if (ld_valid && ld_ready) begin
      checks++; got++;
      if (q_ld.size() == 0 || insn_out !== q_ld.pop_front()) begin failures++; $display("load queue order"); end
    end
    if (cmp_valid && cmp_ready) begin
      checks++; got++;
      if (q_cmp.size() == 0 || insn_out !== q_cmp.pop_front()) begin failures++; $display("compute queue order"); end
    end
    if (st_valid && st_ready) begin
      checks++; got++;
      if (q_st.size() == 0 || insn_out !== q_st.pop_front()) begin failures++; $display("store queue order"); end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int base, int n, output int cyc);
    for (int i = 0; i < n; i++) begin
      automatic logic [127:0] w = {$urandom, $urandom, $urandom, $urandom};
      insn_t x;
      mem_insn_t m;
      w[2:0] = 3'($urandom % 5);
      x = insn_t'(w); m = mem_insn_t'(w);
      if (x.opcode == OP_LOAD) w[9:7] = 3'($urandom % 5);   // mem_type
      x = insn_t'(w); m = mem_insn_t'(w);
      if (x.opcode == OP_LOAD && (m.mem_type == MEM_INP || m.mem_type == MEM_WGT)) q_ld.push_back(w);
      else if (x.opcode == OP_STORE) q_st.push_back(w);
      else q_cmp.push_back(w);
      for (int b = 0; b < 16; b++) u_mem.write_byte(base + i * 16 + b, w[b*8 +: 8]);
    end
    got = 0;
    @(negedge clk); insn_addr = base; insn_count = n; start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (busy || got < n) begin @(negedge clk); cyc++; if (cyc > 20000) break; end
    checks++;
    if (got != n || q_ld.size() + q_cmp.size() + q_st.size() != 0) begin
      failures++; $display("dispatched %0d of %0d", got, n);
    end
  endtask

  initial begin
    int cyc;
    start = 0; insn_addr = 0; insn_count = 0;
    for (int k = 0; k < 4096; k++) u_mem.mem[k] = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    run(64, 200, cyc);           // random back-pressure
    run(8192 + 8, 101, cyc);     // 8-byte aligned start, odd count
    rnd_ready = 0; u_mem.no_gaps = 1;
    run(16384, 200, cyc);        // consumers always ready
    checks++;
    if (last_disp - last_beat > 11) begin failures++; $display("last dispatch %0d cycles after last beat", last_disp - last_beat); end
    $display("200 instructions dispatched in %0d cycles, reorders %0d", cyc, u_mem.reorders);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
