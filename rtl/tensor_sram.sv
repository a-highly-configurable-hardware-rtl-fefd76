// tensor_sram: scratchpad holding DEPTH tensors of TBITS bits each.
//
// Serves as the input buffer, weight buffer, output buffer, accumulator
// register file and micro-op cache. A tensor is stored as NBLK memory blocks
// of BLKBITS bits (BLKBITS = min(tensor width, DRAM bus width)), because the
// load path delivers data one bus beat at a time.
//
// Ports
//   * Block write lanes (NLANES of them, from the load path). Each lane
//     writes one block (wr_blk) of tensor wr_idx; with wr_all set it writes
//     the same block value into every block of the tensor (used for padding,
//     whose tensor is one value repeated).
//   * Full-tensor write port (fw_*), used by GEMM and ALU write-back.
//   * One read port: rd_data holds tensor rd_idx one cycle after rd_en.
//     If that tensor is written in the same cycle the read is issued, the
//     new value is returned (write-to-read forwarding). This is what lets a
//     pipelined GEMM or ALU read an accumulator that the preceding operation
//     writes back in the same cycle.
// The array is a behavioural memory; an ASIC flow would map it to SRAM macros.
// Interface: NLANES block-write lanes (wr_*), one full-tensor write port
// (fw_*), one registered read port (rd_*), rd_fwd flags a forwarded read.
// The scratchpads and the '=' bypass on the accumulator path follow the
// block diagrams; the block/lane write organisation is this design's choice.
module tensor_sram #(
  parameter int unsigned DEPTH   = 8192,
  parameter int unsigned TBITS   = 128,
  parameter int unsigned BLKBITS = 64,
  parameter int unsigned NLANES  = 1
) (
  input  logic                          clk,
  // block write lanes
  input  logic [NLANES-1:0]             wr_valid,
  input  logic [NLANES-1:0]             wr_all,
  input  logic [NLANES-1:0][$clog2(DEPTH)-1:0] wr_idx,
  input  logic [NLANES-1:0][$clog2(TBITS/BLKBITS+1)-1:0] wr_blk,
  input  logic [NLANES-1:0][BLKBITS-1:0] wr_data,
  // full-tensor write
  input  logic                          fw_valid,
  input  logic [$clog2(DEPTH)-1:0]      fw_idx,
  input  logic [TBITS-1:0]              fw_data,
  // read
  input  logic                          rd_en,
  input  logic [$clog2(DEPTH)-1:0]      rd_idx,
  output logic [TBITS-1:0]              rd_data,
  // forwarding happened on the last read (for statistics)
  output logic                          rd_fwd
);
  localparam int unsigned AW   = $clog2(DEPTH);
  localparam int unsigned NBLK = TBITS / BLKBITS;

  logic [NBLK-1:0][BLKBITS-1:0] mem [DEPTH];

  // value of tensor rd_idx after this cycle's writes, for forwarding
  logic                         hit;
  logic [NBLK-1:0][BLKBITS-1:0] merged;

  always_comb begin
    hit    = 1'b0;
    merged = mem[rd_idx];
    for (int l = 0; l < NLANES; l++) begin
      if (wr_valid[l] && wr_idx[l] == rd_idx) begin
        hit = 1'b1;
        for (int b = 0; b < NBLK; b++)
          if (wr_all[l] || wr_blk[l] == b) merged[b] = wr_data[l];
      end
    end
    if (fw_valid && fw_idx == rd_idx) begin
      hit    = 1'b1;
      merged = fw_data;
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < NLANES; l++) begin
      if (wr_valid[l]) begin
        for (int b = 0; b < NBLK; b++)
          if (wr_all[l] || wr_blk[l] == b) mem[wr_idx[l]][b] <= wr_data[l];
      end
    end
    if (fw_valid) mem[fw_idx] <= fw_data;
    if (rd_en) begin
      rd_data <= merged;
      rd_fwd  <= hit;
    end
  end

  initial assert (NBLK * BLKBITS == TBITS) else $error("tensor_sram: TBITS must be a multiple of BLKBITS");

endmodule
