// tb_tensor_sram: random block writes (two lanes, single-block and
// all-block), full-tensor writes and reads against an array model; checks the
// one-cycle read latency and forwarding of a same-cycle write to a read.
// Interface: none (self-contained).
module tb_tensor_sram;
  localparam int DEPTH = 16, TB = 64, BB = 16, NL = 2, NB = TB / BB;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, fwd_seen = 0;

  logic [NL-1:0] wr_valid, wr_all;
  logic [NL-1:0][3:0] wr_idx;
  logic [NL-1:0][$clog2(NB+1)-1:0] wr_blk;
  logic [NL-1:0][BB-1:0] wr_data;
  logic fw_valid, rd_en, rd_fwd;
  logic [3:0] fw_idx, rd_idx;
  logic [TB-1:0] fw_data, rd_data;
  tensor_sram #(.DEPTH(DEPTH), .TBITS(TB), .BLKBITS(BB), .NLANES(NL)) dut (.*);

  logic [TB-1:0] model [DEPTH];
  logic [TB-1:0] expq;
  bit            expv;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_valid = 0; wr_all = 0; fw_valid = 0; rd_en = 0; expv = 0;
    wr_idx = '0; wr_blk = '0; wr_data = '0; fw_idx = 0; fw_data = 0; rd_idx = 0;
    // initialise through the full-tensor port
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); fw_valid = 1; fw_idx = 4'(i); fw_data = {$urandom, $urandom}; model[i] = fw_data;
    end
    @(negedge clk); fw_valid = 0;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (expv) begin
        checks++;
        if (rd_data !== expq) begin failures++; $display("read %h exp %h", rd_data, expq); end
      end
      // new stimulus: lanes write distinct tensors
      wr_valid = NL'($urandom);
      wr_all   = NL'($urandom % 4 == 0 ? 2'b11 : 2'b00);
      wr_idx[0] = 4'($urandom); wr_idx[1] = wr_idx[0] + 4'(1 + $urandom % 14);
      for (int l = 0; l < NL; l++) begin wr_blk[l] = 2'($urandom); wr_data[l] = BB'($urandom); end
      fw_valid = ($urandom % 4 == 0);
      fw_idx   = 4'($urandom);
      if (fw_valid && ((wr_valid[0] && fw_idx == wr_idx[0]) || (wr_valid[1] && fw_idx == wr_idx[1]))) fw_valid = 0;
      fw_data  = {$urandom, $urandom};
      rd_en    = ($urandom % 4 != 0);
      rd_idx   = ($urandom % 2) ? wr_idx[$urandom % 2] : 4'($urandom);
      // model: writes land at this edge; read returns post-write value
      for (int l = 0; l < NL; l++)
        if (wr_valid[l])
          for (int b = 0; b < NB; b++)
            if (wr_all[l] || wr_blk[l] == b) model[wr_idx[l]][b*BB +: BB] = wr_data[l];
      if (fw_valid) model[fw_idx] = fw_data;
      if ((wr_valid[0] && wr_idx[0] == rd_idx) || (wr_valid[1] && wr_idx[1] == rd_idx) ||
          (fw_valid && fw_idx == rd_idx)) if (rd_en) fwd_seen++;
      if (rd_en) begin expq = model[rd_idx]; expv = 1; end
      else expv = expv;   // rd_data holds the last read
    end
    checks++;
    if (fwd_seen == 0) begin failures++; $display("no forwarding case exercised"); end
    $display("forwarded reads: %0d", fwd_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
