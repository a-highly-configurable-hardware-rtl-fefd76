// tb_vme: five clients post random read bursts with unique metadata against
// an out-of-order DRAM model; every returned beat is checked for the right
// client, metadata, beat number and data. Also checks that several requests
// were in flight at once, that bursts did complete out of order, and that a
// strobed write burst reaches memory.
// Interface: none (self-contained). Timing: 40,000-cycle watchdog; no rate
// is given by the paper for the memory engine.
module tb_vme;
  localparam int BUS = 64, NC = 5, NT = 8, TW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NC-1:0] rd_cmd_valid, rd_cmd_ready, rd_data_valid;
  logic [NC-1:0][31:0] rd_cmd_addr;
  logic [NC-1:0][7:0] rd_cmd_len;
  logic [NC-1:0][31:0] rd_cmd_meta;
  logic [BUS-1:0] rd_data;
  logic [31:0] rd_data_meta;
  logic [7:0] rd_data_beat;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic [31:0] ar_addr; logic [7:0] ar_len; logic [TW-1:0] ar_id, r_id;
  logic [BUS-1:0] r_data;
  logic wr_cmd_valid, wr_cmd_ready, wr_data_valid, wr_data_ready, wr_ack;
  logic [31:0] wr_cmd_addr; logic [7:0] wr_cmd_len;
  logic [BUS-1:0] wr_data; logic [7:0] wr_strb;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [31:0] aw_addr; logic [7:0] aw_len; logic [BUS-1:0] w_data; logic [7:0] w_strb;
  logic [$clog2(NT+1)-1:0] inflight;

  vme #(.NCLIENT(NC), .NUM_TAGS(NT), .BUS_BITS(BUS)) dut (.*);
  dram_model #(.BUS_BITS(BUS), .TW(TW), .WORDS(4096), .LAT(8), .MAX_OUT(8)) mem (.*);

  // expected requests, indexed by metadata
  int unsigned e_addr [int], e_len [int], e_cl [int], e_got [int];
  logic [NC-1:0] acc;
  int meta_seq = 1, max_inflight = 0, outstanding_reqs = 0;

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n) begin
    if (int'(inflight) > max_inflight) max_inflight = int'(inflight);
    for (int c = 0; c < NC; c++) if (rd_data_valid[c]) begin
      automatic int m = int'(rd_data_meta);
      checks++;
      if (!e_addr.exists(m)) begin failures++; $display("unknown meta %0d", m); end
      else begin
        if (e_cl[m] != c) begin failures++; $display("meta %0d to client %0d exp %0d", m, c, e_cl[m]); end
        if (int'(rd_data_beat) != e_got[m]) begin failures++; $display("beat %0d exp %0d", rd_data_beat, e_got[m]); end
        if (rd_data !== mem.mem[e_addr[m] / 8 + e_got[m]]) begin failures++; $display("data mismatch meta %0d", m); end
        e_got[m]++;
        if (e_got[m] == e_len[m] + 1) outstanding_reqs--;
      end
    end
  end

  initial begin
    rd_cmd_valid = '0; rd_cmd_addr = '0; rd_cmd_len = '0; rd_cmd_meta = '0;
    wr_cmd_valid = 0; wr_data_valid = 0; wr_cmd_addr = 0; wr_cmd_len = 0; wr_data = 0; wr_strb = 0;
    for (int i = 0; i < 4096; i++) mem.mem[i] = {$urandom, $urandom};
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300 || rd_cmd_valid != 0; ) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++) if (!rd_cmd_valid[c] && ($urandom % 3 == 0) && n < 300) begin
        rd_cmd_valid[c] = 1;
        rd_cmd_addr[c]  = ($urandom % 4000) * 8;
        rd_cmd_len[c]   = 8'($urandom % 8);
        if (rd_cmd_addr[c] / 8 + rd_cmd_len[c] >= 4096) rd_cmd_addr[c] = 0;
        rd_cmd_meta[c]  = meta_seq;
        e_addr[meta_seq] = rd_cmd_addr[c]; e_len[meta_seq] = rd_cmd_len[c];
        e_cl[meta_seq] = c; e_got[meta_seq] = 0;
        meta_seq++; n++; outstanding_reqs++;
      end
      #1 acc = rd_cmd_valid & rd_cmd_ready;
      @(posedge clk); #1;
      rd_cmd_valid = rd_cmd_valid & ~acc;
    end
    wait (outstanding_reqs == 0);
    // every burst fully returned
    foreach (e_got[m]) begin checks++; if (e_got[m] != e_len[m] + 1) begin failures++; $display("meta %0d got %0d beats", m, e_got[m]); end end
    checks++; if (max_inflight < 3) begin failures++; $display("max inflight %0d", max_inflight); end
    checks++; if (mem.reorders == 0) begin failures++; $display("no out-of-order completion"); end
    // write burst of 4 beats, beat 2 with half strobe
    @(negedge clk); wr_cmd_valid = 1; wr_cmd_addr = 32'h800; wr_cmd_len = 3;
    do @(posedge clk); while (!wr_cmd_ready); #1; wr_cmd_valid = 0;
    for (int b = 0; b < 4; b++) begin
      @(negedge clk); wr_data_valid = 1; wr_data = {32'hA0A0_0000 + b, 32'h5555_0000 + b}; wr_strb = (b == 2) ? 8'h0F : 8'hFF;
      do @(posedge clk); while (!wr_data_ready); #1;
    end
    wr_data_valid = 0;
    wait (wr_ack); @(posedge clk); #1;
    for (int b = 0; b < 4; b++) begin
      checks++;
      if (mem.mem[32'h100 + b][31:0] !== 32'h5555_0000 + b) begin failures++; $display("write lo beat %0d", b); end
      if (b != 2) begin checks++; if (mem.mem[32'h100 + b][63:32] !== 32'hA0A0_0000 + b) begin failures++; $display("write hi beat %0d", b); end end
    end
    $display("max inflight %0d reorders %0d", max_inflight, mem.reorders);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
