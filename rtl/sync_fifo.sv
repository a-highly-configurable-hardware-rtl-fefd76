// sync_fifo: first-in first-out command queue with valid/ready handshakes.
//
// Used for the load, compute and store command queues that carry 128-bit
// instructions from the fetch unit to the three execution modules, and as
// the fetch unit's local instruction buffer. A word is written when
// in_valid && in_ready and removed when out_valid && out_ready. The head is
// shown combinationally from the storage array, so a word pushed in cycle t
// can be popped in cycle t+1. Depth must be a power of two. The queue depth
// is this design's choice; the handshake is a plain valid/ready pair.
// Interface: in_valid/in_ready/in_data, out_valid/out_ready/out_data, count.
// Used for the LOAD, COMPUTE and STORE command queues of the block diagram;
// the depth is this design's choice (the paper gives none).
module sync_fifo #(
  parameter int unsigned WIDTH = 128,
  parameter int unsigned DEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned PW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW:0] wptr, rptr;

  assign count     = wptr - rptr;
  assign in_ready  = (count != (PW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr[PW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wptr[PW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (in_valid && in_ready)   wptr <= wptr + 1'b1;
      if (out_valid && out_ready) rptr <= rptr + 1'b1;
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0)
    else $error("sync_fifo: DEPTH must be a power of two");

endmodule
