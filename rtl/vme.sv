// vme: memory engine between the accelerator's DRAM clients and an AXI-style
// memory controller.
//
// Read side. NCLIENT clients (0 fetch, 1 uop, 2 input, 3 weight, 4 acc) post
// burst requests: a bus-aligned byte address, a length (beats - 1) and a
// 32-bit metadata word (normally the destination scratchpad index). A fixed
// priority arbiter (client 0 highest) picks one request per cycle when a tag
// is free. The tag generator hands out the lowest free entry of the tag
// array; the entry stores the client id and the metadata, and only the tag is
// sent to the memory controller as the AXI id. Requests may complete in any
// order: when read data returns, its id indexes the tag array, the data is
// steered to the stored client together with the stored metadata and the beat
// number within the burst, and the tag is freed on the last beat. The number
// of requests in flight is bounded by NUM_TAGS. Beats of different bursts are
// assumed not to interleave (AXI4 rule), so one beat counter suffices.
// Clients must accept data in the cycle it is delivered (r_ready is tied high).
//
// Write side. One client (the store module) posts a burst address/length,
// then streams beats with byte strobes; the engine forwards them, generates
// w_last from the length, and reports each write response as wr_ack. One
// write burst is open at a time.
//
// Timing: a read request is accepted in the cycle ar_valid && ar_ready; data
// reaches the client in the cycle r_valid is high (no added latency).
// The tag mechanism follows the memory engine of the design; arbitration
// policy, tag count and the write path are this design's choices.
// Interface: NCLIENT read clients (cmd valid/ready/addr/len/meta, shared
// data bus with per-client valid), one write client, AXI-style ar/r and
// aw/w/b channels to DRAM, inflight count.
// Lint note: the rst_n 'synchronous and asynchronous' remark comes from the
// assertions' disable iff (!rst_n), which samples reset on the clock; the
// flip-flops themselves use rst_n only as an asynchronous reset.
// Most output bits are direct pass-throughs (r_data -> rd_data, client
// address/length -> ar_*, write data/strobes -> w_*), by design.
module vme
  import vta_pkg::*;
#(
  parameter int unsigned NCLIENT  = 5,
  parameter int unsigned NUM_TAGS = 8,
  parameter int unsigned BUS_BITS = vta_pkg::CFG_BUS_BITS
) (
  input  logic clk,
  input  logic rst_n,
  // read clients
  input  logic [NCLIENT-1:0]             rd_cmd_valid,
  output logic [NCLIENT-1:0]             rd_cmd_ready,
  input  logic [NCLIENT-1:0][31:0]       rd_cmd_addr,
  input  logic [NCLIENT-1:0][LEN_W-1:0]  rd_cmd_len,
  input  logic [NCLIENT-1:0][META_W-1:0] rd_cmd_meta,
  output logic [NCLIENT-1:0]             rd_data_valid,
  output logic [BUS_BITS-1:0]            rd_data,
  output logic [META_W-1:0]              rd_data_meta,
  output logic [LEN_W-1:0]               rd_data_beat,
  // memory read channels
  output logic                           ar_valid,
  input  logic                           ar_ready,
  output logic [31:0]                    ar_addr,
  output logic [LEN_W-1:0]               ar_len,
  output logic [$clog2(NUM_TAGS)-1:0]    ar_id,
  input  logic                           r_valid,
  output logic                           r_ready,
  input  logic [BUS_BITS-1:0]            r_data,
  input  logic [$clog2(NUM_TAGS)-1:0]    r_id,
  input  logic                           r_last,
  // write client
  input  logic                           wr_cmd_valid,
  output logic                           wr_cmd_ready,
  input  logic [31:0]                    wr_cmd_addr,
  input  logic [LEN_W-1:0]               wr_cmd_len,
  input  logic                           wr_data_valid,
  output logic                           wr_data_ready,
  input  logic [BUS_BITS-1:0]            wr_data,
  input  logic [BUS_BITS/8-1:0]          wr_strb,
  output logic                           wr_ack,
  // memory write channels
  output logic                           aw_valid,
  input  logic                           aw_ready,
  output logic [31:0]                    aw_addr,
  output logic [LEN_W-1:0]               aw_len,
  output logic                           w_valid,
  input  logic                           w_ready,
  output logic [BUS_BITS-1:0]            w_data,
  output logic [BUS_BITS/8-1:0]          w_strb,
  output logic                           w_last,
  input  logic                           b_valid,
  output logic                           b_ready,
  // status
  output logic [$clog2(NUM_TAGS+1)-1:0]  inflight
);
  localparam int unsigned TW = $clog2(NUM_TAGS);
  localparam int unsigned CW = $clog2(NCLIENT);

  // ---------------- tag array ----------------
  logic [NUM_TAGS-1:0]            tag_busy;
  logic [NUM_TAGS-1:0][CW-1:0]    tag_src;
  logic [NUM_TAGS-1:0][META_W-1:0] tag_meta;

  // tag generator: lowest free entry
  logic          free_found;
  logic [TW-1:0] free_tag;
  always_comb begin
    free_found = 1'b0;
    free_tag   = '0;
    for (int t = NUM_TAGS - 1; t >= 0; t--) begin
      if (!tag_busy[t]) begin
        free_found = 1'b1;
        free_tag   = TW'(t);
      end
    end
  end

  // arbiter: fixed priority, client 0 first
  logic          any_req;
  logic [CW-1:0] grant;
  always_comb begin
    any_req = 1'b0;
    grant   = '0;
    for (int c = NCLIENT - 1; c >= 0; c--) begin
      if (rd_cmd_valid[c]) begin
        any_req = 1'b1;
        grant   = CW'(c);
      end
    end
  end

  assign ar_valid = any_req && free_found;
  assign ar_addr  = rd_cmd_addr[grant];
  assign ar_len   = rd_cmd_len[grant];
  assign ar_id    = free_tag;

  always_comb begin
    rd_cmd_ready = '0;
    rd_cmd_ready[grant] = ar_valid && ar_ready;
  end

  // read data return
  logic [LEN_W-1:0] beat_cnt;
  assign r_ready      = 1'b1;
  assign rd_data      = r_data;
  assign rd_data_meta = tag_meta[r_id];
  assign rd_data_beat = beat_cnt;
  always_comb begin
    rd_data_valid = '0;
    if (r_valid) rd_data_valid[tag_src[r_id]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tag_busy <= '0;
      beat_cnt <= '0;
    end else begin
      if (r_valid) begin
        beat_cnt <= r_last ? '0 : beat_cnt + 1'b1;
        if (r_last) tag_busy[r_id] <= 1'b0;
      end
      if (ar_valid && ar_ready) tag_busy[free_tag] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ar_valid && ar_ready) begin
      tag_src[free_tag]  <= grant;
      tag_meta[free_tag] <= rd_cmd_meta[grant];
    end
  end

  always_comb begin
    inflight = '0;
    for (int t = 0; t < NUM_TAGS; t++) inflight += tag_busy[t];
  end

  // ---------------- write path ----------------
  logic             w_open;
  logic [LEN_W-1:0] w_left;

  assign aw_valid      = wr_cmd_valid && !w_open;
  assign wr_cmd_ready  = aw_ready && !w_open;
  assign aw_addr       = wr_cmd_addr;
  assign aw_len        = wr_cmd_len;
  assign w_valid       = wr_data_valid && w_open;
  assign wr_data_ready = w_ready && w_open;
  assign w_data        = wr_data;
  assign w_strb        = wr_strb;
  assign w_last        = (w_left == '0);
  assign b_ready       = 1'b1;
  assign wr_ack        = b_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_open <= 1'b0;
      w_left <= '0;
    end else if (aw_valid && aw_ready) begin
      w_open <= 1'b1;
      w_left <= wr_cmd_len;
    end else if (w_valid && w_ready) begin
      if (w_last) w_open <= 1'b0;
      else        w_left <= w_left - 1'b1;
    end
  end

  // returned ids must name a tag in flight
  a_tag_live: assert property (@(posedge clk) disable iff (!rst_n) r_valid |-> tag_busy[r_id]);

endmodule
