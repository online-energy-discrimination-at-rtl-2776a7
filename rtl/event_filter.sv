// event_filter: data discrimination module of the online energy filter.
//
// Inspects the front-end packet stream word by word. A packet is a header word
// (sop) followed by its gamma-event words, the last one flagged eop. Headers
// always pass. For every event the module computes the coarse TOT with the
// hardwired rules (coarse_tot), obtains the lower/upper thresholds of the
// event's channel and keeps the event only if lo <= tot <= hi. Kept words leave
// unmodified and in order; rejected events are simply removed, so the packet
// format is unchanged and downstream logic sees an ordinary, shorter packet.
//
// Threshold source: the module asks for the thresholds of a channel on
// thr_req/thr_chan and uses thr_in THR_LATENCY cycles later.
//   THR_LATENCY = 0: uncalibrated filter, thr_in is one global register.
//   THR_LATENCY = 2: calibrated filter, thr_in is the per-channel table.
// Timing, following the source: an event takes 1 + THR_LATENCY cycles
// (1 cycle uncalibrated, 3 cycles calibrated; in_ready is low meanwhile), a
// header takes 1 cycle, and a packet costs one extra cycle at its end. That
// extra cycle comes from how the end of packet is handled here (own design):
// the last kept word is held back one word so that, if the packet's last
// events are rejected, the eop flag can be moved onto the last word that
// survives. The held word leaves when the next kept word arrives, or one cycle
// after the packet's eop word has been decided.
// Own choices: valid/ready on the input, no back-pressure on the output (the
// source reports no dead time downstream), inclusive threshold comparison,
// event counters by rule for monitoring.
// rst_n also appears in the assertions' disable-iff clauses; lint reports that
// as a synchronous use of the asynchronous reset, but no logic depends on it.
module event_filter
  import efilter_pkg::*;
#(
  parameter int unsigned THR_LATENCY        = 2,
  parameter int          RO_LIMIT           = RO_LIMIT_DEFAULT,
  parameter int          UPPER_BOUND        = UPPER_BOUND_DEFAULT,
  parameter bit          ENABLE_UPPER_BOUND = 1'b1
) (
  input  logic      clk,
  input  logic      rst_n,
  // input packet stream
  input  logic      in_valid,
  output logic      in_ready,
  input  pkt_word_t in_word,
  // output packet stream
  output logic      out_valid,
  output pkt_word_t out_word,
  // threshold lookup
  output logic      thr_req,
  output chan_t     thr_chan,
  input  thr_pair_t thr_in,
  // per-event decision strobes (monitoring)
  output logic      ev_done,      // one event decided this cycle
  output logic      ev_kept,      // ... and it was kept
  output tot_rule_e ev_rule       // ... rule that produced its coarse TOT
);

  // ---------------------------------------------------------------- coarse TOT
  event_word_t in_ev;
  coarse_t     in_tot;
  tot_rule_e   in_rule;
  assign in_ev = event_word_t'(in_word.data);

  coarse_tot #(
    .RO_LIMIT          (RO_LIMIT),
    .UPPER_BOUND       (UPPER_BOUND),
    .ENABLE_UPPER_BOUND(ENABLE_UPPER_BOUND)
  ) u_tot (
    .t_coarse(in_ev.t_coarse),
    .e_coarse(in_ev.e_coarse),
    .tot     (in_tot),
    .rule    (in_rule)
  );

  logic accept;
  assign accept   = in_valid && in_ready;
  assign thr_req  = accept && !in_word.sop;
  assign thr_chan = in_ev.channel;

  // ---------------------------------------------------------- decision stage
  // dec_* describe the word whose keep/drop decision is made this cycle.
  logic      dec_valid, dec_keep, dec_is_event;
  pkt_word_t dec_word;
  tot_rule_e dec_rule;

  function automatic logic in_window(coarse_t tot, thr_pair_t t);
    return (tot >= t.lo) && (tot <= t.hi);
  endfunction

  if (THR_LATENCY == 0) begin : g_direct
    // Decision in the cycle the word is accepted.
    assign in_ready     = 1'b1;
    assign dec_valid    = accept;
    assign dec_word     = in_word;
    assign dec_is_event = !in_word.sop;
    assign dec_rule     = in_rule;
    assign dec_keep     = in_word.sop || in_window(in_tot, thr_in);
  end else begin : g_lookup
    // Headers are decided at acceptance; events wait THR_LATENCY cycles for
    // their thresholds with the input stalled.
    localparam int unsigned CW = $clog2(THR_LATENCY + 1);
    logic [CW-1:0] wait_cnt;
    logic          busy;
    pkt_word_t     word_q;
    coarse_t       tot_q;
    tot_rule_e     rule_q;
    logic          ev_ready;

    assign in_ready = !busy;
    assign ev_ready = busy && (wait_cnt == CW'(THR_LATENCY));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        busy     <= 1'b0;
        wait_cnt <= '0;
        word_q   <= '0;
        tot_q    <= '0;
        rule_q   <= TOT_GENERAL;
      end else if (accept && !in_word.sop) begin
        busy     <= 1'b1;
        wait_cnt <= CW'(1);
        word_q   <= in_word;
        tot_q    <= in_tot;
        rule_q   <= in_rule;
      end else if (ev_ready) begin
        busy     <= 1'b0;
        wait_cnt <= '0;
      end else if (busy) begin
        wait_cnt <= wait_cnt + 1'b1;
      end
    end

    assign dec_valid    = ev_ready || (accept && in_word.sop);
    assign dec_word     = ev_ready ? word_q : in_word;
    assign dec_is_event = ev_ready;
    assign dec_rule     = rule_q;
    assign dec_keep     = !ev_ready || in_window(tot_q, thr_in);
  end

  assign ev_done = dec_valid && dec_is_event;
  assign ev_kept = ev_done && dec_keep;
  assign ev_rule = dec_rule;

  // ----------------------------------------------------- hold-back / output
  pkt_word_t held;
  logic      held_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held      <= '0;
      held_v    <= 1'b0;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= 1'b0;
      // flush: the held word is the last survivor of its packet
      if (held_v && held.eop) begin
        out_valid    <= 1'b1;
        out_word     <= held;
        held_v       <= 1'b0;
      end
      if (dec_valid) begin
        if (dec_keep) begin
          if (held_v && !held.eop) begin
            out_valid    <= 1'b1;
            out_word     <= held;       // a later word of its packet survives
          end
          held   <= dec_word;
          held_v <= 1'b1;
        end else if (dec_word.eop && held_v && !held.eop) begin
          // last event rejected: the held word now ends the packet
          out_valid        <= 1'b1;
          out_word         <= held;
          out_word.eop     <= 1'b1;
          held_v           <= 1'b0;
        end
      end
    end
  end

  // ------------------------------------------------------------- assertions
  // A word offered and not taken must stay on the input.
  property p_hold_input;
    @(posedge clk) disable iff (!rst_n)
      (in_valid && !in_ready) |=> (in_valid && $stable(in_word));
  endproperty
  a_hold_input: assert property (p_hold_input);

  // Every emitted packet starts with its header.
  logic out_in_pkt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_in_pkt <= 1'b0;
    else if (out_valid) out_in_pkt <= !out_word.eop;
  end
  a_out_framing: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> (out_word.sop == !out_in_pkt));

endmodule
