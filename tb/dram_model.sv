// dram_model: behavioural DRAM with an AXI-style controller, for testbenches.
//
// Memory of WORDS bus words. Read channel: accepts up to MAX_OUT bursts
// (ar_ready low when full); each becomes ready LAT cycles after acceptance;
// among the ready bursts one is picked at random (when OOO is set) and
// streamed back one beat per cycle with its id, so bursts complete out of
// order. Beats of different bursts never interleave. Write channel: one
// burst at a time; beats are applied under their byte strobes; a response
// pulses b_valid one cycle after the last beat. r_valid may also pause at
// random between beats when OOO is set. Helper functions read and write
// single bytes for the testbenches. Not synthesizable; not part of the design.
// Interface: AXI-style ar/r and aw/w/b channels; write_byte/read_byte for
// testbench access; reorders/max_pending statistics. Behavioural model only
// (the paper's DRAM and its controller are outside the design).
module dram_model #(
  parameter int unsigned BUS_BITS = 64,
  parameter int unsigned TW       = 3,
  parameter int unsigned WORDS    = 65536,
  parameter int unsigned LAT      = 6,
  parameter int unsigned MAX_OUT  = 8,
  parameter bit          OOO      = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ar_valid,
  output logic                  ar_ready,
  input  logic [31:0]           ar_addr,
  input  logic [7:0]            ar_len,
  input  logic [TW-1:0]         ar_id,
  output logic                  r_valid,
  input  logic                  r_ready,
  output logic [BUS_BITS-1:0]   r_data,
  output logic [TW-1:0]         r_id,
  output logic                  r_last,
  input  logic                  aw_valid,
  output logic                  aw_ready,
  input  logic [31:0]           aw_addr,
  input  logic [7:0]            aw_len,
  input  logic                  w_valid,
  output logic                  w_ready,
  input  logic [BUS_BITS-1:0]   w_data,
  input  logic [BUS_BITS/8-1:0] w_strb,
  input  logic                  w_last,
  output logic                  b_valid,
  input  logic                  b_ready
);
  localparam int unsigned BUSB = BUS_BITS / 8;

  logic [BUS_BITS-1:0] mem [WORDS];

  function automatic void write_byte(int unsigned addr, logic [7:0] v);
    mem[(addr / BUSB) % WORDS][(addr % BUSB)*8 +: 8] = v;
  endfunction
  function automatic logic [7:0] read_byte(int unsigned addr);
    return mem[(addr / BUSB) % WORDS][(addr % BUSB)*8 +: 8];
  endfunction

  // statistics
  int unsigned reorders = 0;      // bursts returned ahead of an older one
  int unsigned max_pending = 0;   // most bursts outstanding at once
  bit          no_gaps = 1'b0;  // set by a testbench to return beats back to back

  // ---------------- read side ----------------
  logic [31:0]   p_addr [MAX_OUT];
  logic [7:0]    p_len  [MAX_OUT];
  logic [TW-1:0] p_id   [MAX_OUT];
  longint        p_t    [MAX_OUT];
  longint        p_seq  [MAX_OUT];
  logic [MAX_OUT-1:0] p_v;
  longint now, seq;
  int  act;          // active burst slot or -1
  int  beat;

  assign ar_ready = !(&p_v);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_v <= '0; now <= 0; seq <= 0; act <= -1; beat <= 0;
      r_valid <= 1'b0; r_last <= 1'b0; r_data <= '0; r_id <= '0;
    end else begin
      automatic int npend;
      now <= now + 1;
      if (ar_valid && ar_ready) begin
        for (int s = 0; s < MAX_OUT; s++) begin
          if (!p_v[s]) begin
            p_v[s] <= 1'b1; p_addr[s] <= ar_addr; p_len[s] <= ar_len; p_id[s] <= ar_id;
            p_t[s] <= now + LAT; p_seq[s] <= seq; seq <= seq + 1;
            break;
          end
        end
      end
      npend = $countones(p_v);
      if (npend > max_pending) max_pending = npend;
      // beat presentation
      begin
        automatic bit fired = r_valid && r_ready;
        automatic bit hold  = r_valid && !r_ready;
        automatic bit ended = fired && r_last;
        if (fired) r_valid <= 1'b0;
        if (ended) begin
          p_v[act] <= 1'b0;
          act <= -1;
        end
        if (!ended && !hold && act >= 0 && beat <= int'(p_len[act]) && (!OOO || no_gaps || ($urandom % 4) != 0)) begin
          r_valid <= 1'b1;
          r_data  <= mem[((p_addr[act] / BUSB) + beat) % WORDS];
          r_id    <= p_id[act];
          r_last  <= (beat == int'(p_len[act]));
          beat    <= beat + 1;
        end
      end
      if (act < 0 && !(r_valid)) begin
        // pick a ready burst
        automatic int cand[$];
        automatic int pick;
        automatic longint oldest = -1;
        for (int s = 0; s < MAX_OUT; s++)
          if (p_v[s] && p_t[s] <= now) cand.push_back(s);
        if (cand.size() > 0) begin
          pick = OOO ? cand[$urandom % cand.size()] : cand[0];
          if (!OOO) foreach (cand[i]) if (p_seq[cand[i]] < p_seq[pick]) pick = cand[i];
          for (int s = 0; s < MAX_OUT; s++)
            if (p_v[s] && (oldest < 0 || p_seq[s] < oldest)) oldest = p_seq[s];
          if (p_seq[pick] != oldest) reorders++;
          act  <= pick;
          beat <= 0;
        end
      end
    end
  end

  // ---------------- write side ----------------
  logic        w_open;
  logic [31:0] w_word;
  assign aw_ready = !w_open && !b_valid;
  assign w_ready  = w_open;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_open <= 1'b0; w_word <= '0; b_valid <= 1'b0;
    end else begin
      if (b_valid && b_ready) b_valid <= 1'b0;
      if (aw_valid && aw_ready) begin
        w_open <= 1'b1;
        w_word <= aw_addr / BUSB;
      end
      if (w_valid && w_ready) begin
        for (int i = 0; i < BUSB; i++)
          if (w_strb[i]) mem[w_word % WORDS][i*8 +: 8] <= w_data[i*8 +: 8];
        w_word <= w_word + 1;
        if (w_last) begin
          w_open  <= 1'b0;
          b_valid <= 1'b1;
        end
      end
    end
  end

endmodule
