// st_harness: store_module with an output buffer, the vme write path and the
// DRAM model. Random STORE instructions (tile size, stride, addresses) are
// sent through the command interface; the compute-to-store token is
// withheld for a while snap each one and the harness checks that nothing
// is written to DRAM snap the token is given, that exactly one
// store-to-compute token is pushed after the last write is acknowledged, and
// that DRAM holds the output-buffer tensors at the right addresses with the
// bytes around the tile untouched.
// Interface: clk in; checks/failures/fin out. Timing: waits 20 cycles
// without the token before giving it; no rate is given for stores.
module st_harness #(
  parameter int unsigned BUS  = 64,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic fin
);
  import vta_pkg::*;
  localparam int BO = 16, OT = BO * 8, D = 8192, WORDS = 8192, BUSB = BUS / 8;
  logic rst_n;
  logic cmd_valid, cmd_ready, has, pop, can, push, busy;
  logic [127:0] cmd_data;
  logic out_rd_en; logic [12:0] out_rd_idx; logic [OT-1:0] out_rd_data; logic fwd;
  logic wr_cmd_valid, wr_cmd_ready, wr_data_valid, wr_data_ready, wr_ack;
  logic [31:0] wr_cmd_addr; logic [7:0] wr_cmd_len; logic [BUS-1:0] wr_data; logic [BUSB-1:0] wr_strb;
  logic [4:0] rcr, rdv; logic [BUS-1:0] rd_data; logic [31:0] rd_data_meta; logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [2:0] ar_id, r_id; logic [BUS-1:0] r_data;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [BUS-1:0] w_data; logic [BUSB-1:0] w_strb;
  logic [3:0] inflight;

  store_module #(.BUS_BITS(BUS)) dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd_data,
    .cmp2st_has(has), .cmp2st_pop(pop), .st2cmp_can(can), .st2cmp_push(push),
    .out_rd_en, .out_rd_idx, .out_rd_data, .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len,
    .wr_data_valid, .wr_data_ready, .wr_data, .wr_strb, .wr_ack, .busy);
  tensor_sram #(.DEPTH(D), .TBITS(OT), .BLKBITS(OT)) u_out (.clk, .wr_valid('0), .wr_all('0), .wr_idx('0), .wr_blk('0), .wr_data('0),
    .fw_valid(1'b0), .fw_idx('0), .fw_data('0), .rd_en(out_rd_en), .rd_idx(out_rd_idx), .rd_data(out_rd_data), .rd_fwd(fwd));
  vme #(.NCLIENT(5), .NUM_TAGS(8), .BUS_BITS(BUS)) u_vme (
    .clk, .rst_n, .rd_cmd_valid('0), .rd_cmd_ready(rcr), .rd_cmd_addr('0), .rd_cmd_len('0),
    .rd_cmd_meta('0), .rd_data_valid(rdv), .rd_data, .rd_data_meta, .rd_data_beat,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .ar_id, .r_valid, .r_ready, .r_data, .r_id, .r_last,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_len,
    .wr_data_valid, .wr_data_ready, .wr_data, .wr_strb, .wr_ack,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_strb, .w_last,
    .b_valid, .b_ready, .inflight);
  dram_model #(.BUS_BITS(BUS), .TW(3), .WORDS(WORDS), .LAT(4), .MAX_OUT(8)) u_mem (.*);

  int pushes = 0, early = 0;
  logic token, token_given;
  int   seen_aw = 0;                 // token offered by the "compute module"
  assign has = token;
  assign can = 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (push) pushes++;
    if (aw_valid && !token_given) early++;
  end

  logic [7:0] snap [int];

  initial begin
    mem_insn_t m; int p0;
    checks = 0; failures = 0; fin = 0; rst_n = 0; cmd_valid = 0; cmd_data = '0; token = 0; token_given = 0;
    void'($urandom(SEED));
    for (int k = 0; k < WORDS; k++) u_mem.mem[k] = {BUS/32{$urandom}};
    for (int k = 0; k < D; k++) u_out.mem[k] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      m = '0; m.opcode = OP_STORE; m.mem_type = MEM_OUT; m.dep.pop_prev = 1; m.dep.push_prev = 1;
      m.x_size = 16'(1 + $urandom % 7); m.y_size = 16'(1 + $urandom % 4);
      if (n == 0) m.x_size = 16'(200);           // longer than one burst in narrow mode
      m.x_stride = m.x_size + 16'($urandom % 5);
      m.sram_base = 13'($urandom % 4000); m.dram_base = 32'(1 + $urandom % 2000);
      // snapshot the DRAM area around the tile
      snap.delete();
      for (int a = int'(m.dram_base) * 16 - 32; a < (int'(m.dram_base) + int'(m.y_size) * int'(m.x_stride)) * 16 + 32; a++)
        snap[a] = u_mem.read_byte(a);
      p0 = pushes; early = 0; token_given = 0;
      @(negedge clk); cmd_valid = 1; cmd_data = m;
      do @(posedge clk); while (!cmd_ready); #1 cmd_valid = 0;
      repeat (20) @(negedge clk);
      checks++; if (pushes != p0) begin failures++; $display("store pushed before its token"); end
      checks++; if (early != 0) begin failures++; $display("store wrote before its token"); end
      checks++; if (aw_valid) begin failures++; $display("store wrote snap its token"); end
      token = 1; token_given = 1;
      do @(posedge clk); while (!pop); #1 token = 0;
      while (busy) @(negedge clk);
      repeat (2) @(negedge clk);
      checks++; if (pushes != p0 + 1) begin failures++; $display("pushes %0d expected %0d", pushes - p0, 1); end
      foreach (snap[a]) begin
        automatic int t = a / 16 - int'(m.dram_base), r = t / int'(m.x_stride), c = t % int'(m.x_stride);
        automatic logic [7:0] exp = snap[a];
        if (t >= 0 && r < int'(m.y_size) && c < int'(m.x_size))
          exp = u_out.mem[int'(m.sram_base) + r * int'(m.x_size) + c][0][(a % 16) * 8 +: 8];
        checks++;
        if (u_mem.read_byte(a) !== exp) begin
          failures++; if (failures < 6) $display("store B%0d n%0d byte %0d wrong got %h exp %h t %0d", BUS, n, a, u_mem.read_byte(a), exp, t);
        end
      end
    end
    fin = 1;
  end
endmodule
