// hit_collector -- turns the edge pulses of a group of strips into a stream
// of encoded hit words, one word per clock at most.
//
// Any number of strips may cross threshold in the same 10-ns clock, but words
// leave one at a time, so each strip owns two holding registers, one for a
// leading and one for a trailing edge, each with a pending flag and the time
// stamp taken in the cycle the edge was seen.  A strip thus keeps a whole
// pulse (both edges) while a burst of neighbouring strips, as a particle
// track produces, is serialized.  Every cycle the lowest-numbered strip with
// a pending edge is offered on the output as a complete word
// {edge, BASE + index, time}; if both of its edges are pending, the older one
// goes first.  A word that is offered stays offered until the consumer
// accepts it, and then its register is freed.  An edge whose register is
// still occupied by the previous edge of the same kind is lost and counted;
// an edge arriving in the cycle its register is emptied takes it.
//
// The paper states what the words contain and that all edges are encoded and
// streamed without a trigger; the holding registers, the fixed lowest-index
// priority and the loss rule are this design's choice (the paper gives no
// insides for the encoder).
//
// Interface: lead/trail from strip_sync, tstamp from tof_timer.
// out_valid/out_ready/out_word form a valid-ready handshake: a word moves on
// a clock edge where both are high; out_word is stable while out_valid is
// high and out_ready low.  lost_count counts lost edges and saturates.
// Timing: an edge on an idle group is offered in the next cycle.
module hit_collector
  import encoder_pkg::*;
#(
  parameter int unsigned N      = 256,
  parameter int unsigned BASE   = 0,
  parameter int unsigned LOST_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N-1:0]      lead,
  input  logic [N-1:0]      trail,
  input  tstamp_t           tstamp,
  output logic              out_valid,
  input  logic              out_ready,
  output hit_word_t         out_word,
  output logic [LOST_W-1:0] lost_count
);

  localparam int unsigned IDX_W = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned CNT_W = $clog2(N + 1);   // edges lost in one cycle

  logic [N-1:0] pend_l, pend_t;      // leading / trailing edge held
  logic [N-1:0] trail_older;         // both held and the trailing one came first
  tstamp_t      ts_l [N];
  tstamp_t      ts_t [N];

  logic [IDX_W-1:0] sel, sel_q;
  logic             stall_q;
  logic             sel_trail;
  logic [N-1:0]     pop_l, pop_t, keep_l, keep_t;
  logic [N-1:0]     lost_l, lost_t, cap_l, cap_t;
  logic [CNT_W-1:0] n_lost;

  // Lowest-index strip with an edge held; a word offered and not yet taken
  // keeps its place, so the output holds as the handshake requires.
  always_comb begin
    sel = '0;
    for (int i = N - 1; i >= 0; i--) begin
      if (pend_l[i] || pend_t[i]) sel = IDX_W'(i);
    end
    if (stall_q) sel = sel_q;
  end

  always_comb begin
    out_valid = |(pend_l | pend_t);
    // Of the selected strip's edges, the older one (a trailing edge held
    // alone is always the older).
    sel_trail = pend_t[sel] && (!pend_l[sel] || trail_older[sel]);
    out_word.edge_bit = sel_trail ? EDGE_TRAILING : EDGE_LEADING;
    out_word.strip    = strip_t'(BASE + 32'(sel));
    out_word.tstamp   = sel_trail ? ts_t[sel] : ts_l[sel];
    pop_l = '0;
    pop_t = '0;
    if (out_valid && out_ready) begin
      if (sel_trail) pop_t[sel] = 1'b1;
      else           pop_l[sel] = 1'b1;
    end
    keep_l = pend_l & ~pop_l;
    keep_t = pend_t & ~pop_t;
    lost_l = lead  & keep_l;
    lost_t = trail & keep_t;
    cap_l  = lead  & ~lost_l;
    cap_t  = trail & ~lost_t;
    n_lost = '0;
    for (int i = 0; i < N; i++) n_lost += CNT_W'(lost_l[i]) + CNT_W'(lost_t[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_l      <= '0;
      pend_t      <= '0;
      trail_older <= '0;
      lost_count  <= '0;
      stall_q     <= 1'b0;
      sel_q       <= '0;
    end else begin
      stall_q <= out_valid && !out_ready;
      sel_q   <= sel;
      pend_l  <= keep_l | cap_l;
      pend_t  <= keep_t | cap_t;
      for (int i = 0; i < N; i++) begin
        if (cap_l[i] && keep_t[i])      trail_older[i] <= 1'b1;
        else if (cap_t[i] && keep_l[i]) trail_older[i] <= 1'b0;
      end
      if (32'(lost_count) + 32'(n_lost) > 32'({LOST_W{1'b1}}))
        lost_count <= '1;
      else
        lost_count <= lost_count + LOST_W'(n_lost);
    end
  end

  // Time stamps need no reset: they are read only while their edge is held.
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (cap_l[i]) ts_l[i] <= tstamp;
      if (cap_t[i]) ts_t[i] <= tstamp;
    end
  end

  // A strip cannot show both edges in one cycle.
  a_one_edge: assert property (@(posedge clk) disable iff (!rst_n) (lead & trail) == '0);
  // A word offered and not taken stays as it is.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_word));

endmodule
