// store_module: executes STORE instructions, copying output-buffer tensors
// to DRAM.
//
// A STORE names y_size rows of x_size tensors starting at output-buffer index
// sram_base (rows packed back to back) and DRAM tensor address dram_base
// (rows x_stride tensors apart). Sequence per instruction: take it from the
// store command queue; honour pop_prev (wait for and remove a CMP->ST token);
// write the tile; wait until every write burst is acknowledged; honour
// push_prev (insert an ST->CMP token, telling compute the output buffer area
// is free again). The store module is rightmost, so it has no "next" queues.
// Writing: when a tensor is at least as wide as the bus (narrow mode) each
// row chunk of up to 256 beats is one burst and a tensor takes
// OUT_T/BUS_BITS beats; when the bus is wider (wide mode) each tensor is a
// one-beat burst at the bus-aligned address with byte strobes selecting its
// slot. Each tensor is read from the output buffer (one cycle) and then sent.
// Interface: command queue, two dependency queue ports, output-buffer read
// port and the VME write client. The transfer format is this design's choice.
module store_module
  import vta_pkg::*;
#(
  parameter int unsigned BATCH     = vta_pkg::CFG_BATCH,
  parameter int unsigned BLOCK_OUT = vta_pkg::CFG_BLOCK_OUT,
  parameter int unsigned BUS_BITS  = vta_pkg::CFG_BUS_BITS,
  parameter int unsigned OUT_DEPTH = 8192,
  localparam int unsigned OUT_T = BATCH * BLOCK_OUT * 8,
  localparam int unsigned OAW   = $clog2(OUT_DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  logic [INSN_BITS-1:0] cmd_data,
  input  logic cmp2st_has,
  output logic cmp2st_pop,
  input  logic st2cmp_can,
  output logic st2cmp_push,
  // output buffer read
  output logic             out_rd_en,
  output logic [OAW-1:0]   out_rd_idx,
  input  logic [OUT_T-1:0] out_rd_data,
  // VME write client
  output logic                  wr_cmd_valid,
  input  logic                  wr_cmd_ready,
  output logic [31:0]           wr_cmd_addr,
  output logic [LEN_W-1:0]      wr_cmd_len,
  output logic                  wr_data_valid,
  input  logic                  wr_data_ready,
  output logic [BUS_BITS-1:0]   wr_data,
  output logic [BUS_BITS/8-1:0] wr_strb,
  input  logic                  wr_ack,
  output logic busy
);
  localparam bit  WIDE   = (BUS_BITS > OUT_T);
  localparam int unsigned NBLK  = WIDE ? 1 : OUT_T / BUS_BITS;
  localparam int unsigned TPB   = WIDE ? BUS_BITS / OUT_T : 1;
  localparam int unsigned LTPB  = $clog2(TPB);
  localparam int unsigned TBYTES = OUT_T / 8;
  localparam int unsigned BUSB  = BUS_BITS / 8;
  localparam int unsigned CH    = WIDE ? 1 : 256 / NBLK;

  typedef enum logic [2:0] {S_IDLE, S_POP, S_AW, S_RD, S_SEND, S_WAITB, S_PUSH} state_t;
  state_t    st;
  mem_insn_t ins;
  logic [15:0] y, x, k, n;
  logic [15:0] b;
  logic [31:0] row_dram, row_sram;
  logic [15:0] outstanding;
  logic [31:0] t;       // dram tensor address of the current chunk

  assign busy = (st != S_IDLE);
  assign t    = row_dram + 32'(x);
  always_comb begin
  end

  assign cmd_ready     = (st == S_IDLE);
  assign cmp2st_pop    = (st == S_POP) && ins.dep.pop_prev && cmp2st_has;
  assign st2cmp_push   = (st == S_PUSH) && ins.dep.push_prev && st2cmp_can;

  assign wr_cmd_valid  = (st == S_AW);
  assign wr_cmd_addr   = WIDE ? ((t >> LTPB) * BUSB) : (t * TBYTES);
  assign wr_cmd_len    = LEN_W'(32'(n) * NBLK - 1);
  assign out_rd_en     = (st == S_RD);
  assign out_rd_idx    = OAW'(row_sram + 32'(x) + 32'(k));
  assign wr_data_valid = (st == S_SEND);

  if (WIDE) begin : g_wide
    always_comb begin
      wr_data = '0;
      wr_strb = '0;
      for (int s = 0; s < TPB; s++) begin
        if (s == int'(t & (TPB - 1))) begin
          wr_data[s*OUT_T +: OUT_T]   = out_rd_data;
          wr_strb[s*TBYTES +: TBYTES] = '1;
        end
      end
    end
  end else begin : g_narrow
    assign wr_data = out_rd_data[32'(b)*BUS_BITS +: BUS_BITS];
    assign wr_strb = '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ins <= '0; y <= '0; x <= '0; k <= '0; n <= '0; b <= '0;
      row_dram <= '0; row_sram <= '0; outstanding <= '0;
    end else begin
      outstanding <= outstanding + ((wr_cmd_valid && wr_cmd_ready) ? 16'd1 : 16'd0)
                                 - (wr_ack ? 16'd1 : 16'd0);
      unique case (st)
        S_IDLE: if (cmd_valid) begin
          ins <= mem_insn_t'(cmd_data);
          st  <= S_POP;
        end
        S_POP: if (!ins.dep.pop_prev || cmp2st_has) begin
          y <= '0; x <= '0; k <= '0; b <= '0;
          row_dram <= ins.dram_base;
          row_sram <= 32'(ins.sram_base);
          n  <= (ins.x_size > CH) ? 16'(CH) : ins.x_size;
          st <= (ins.x_size == 0 || ins.y_size == 0) ? S_WAITB : S_AW;
        end
        S_AW: if (wr_cmd_ready) begin
          k  <= '0;
          st <= S_RD;
        end
        S_RD: begin
          b  <= '0;
          st <= S_SEND;
        end
        S_SEND: if (wr_data_ready) begin
          if (b != 16'(NBLK - 1)) b <= b + 1'b1;
          else if (k + 1'b1 != n) begin
            k  <= k + 1'b1;
            st <= S_RD;
          end else begin
            // chunk finished
            if (x + n >= ins.x_size) begin
              x <= '0;
              y <= y + 1'b1;
              row_dram <= row_dram + 32'(ins.x_stride);
              row_sram <= row_sram + 32'(ins.x_size);
              n  <= (ins.x_size > CH) ? 16'(CH) : ins.x_size;
              st <= (y + 1'b1 == ins.y_size) ? S_WAITB : S_AW;
            end else begin
              x  <= x + n;
              n  <= ((ins.x_size - x - n) > CH) ? 16'(CH) : (ins.x_size - x - n);
              st <= S_AW;
            end
          end
        end
        S_WAITB: if (outstanding == 0 && !wr_ack) st <= S_PUSH;
        S_PUSH: if (!ins.dep.push_prev || st2cmp_can) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

endmodule
