// coinc_counter: pairwise coincidence counting (C_TG_D1, C_TG_D2, C_D1_D2).
//
// Two stamped event streams a and b are compared by arrival time. An event
// that finds no partner is held as pending until it is older than the
// coincidence window; an event on the other stream whose arrival time lies
// within `window` cycles of a pending one (modulo 2**8) makes one coincidence
// and consumes the pending event, so a pair is never counted twice. Events
// on both streams in the same cycle are compared directly. The number of
// coincidences per gate is accumulated in a 24-bit counter, as the paper
// states. The paper does not describe how its coincidence units decide that
// two arrival times coincide; the pending-event scheme and the run-time
// window width are this design's own.
//
// Interface: ev_a, ev_b from toa_stamp, now is the shared time base, window
// is the largest arrival-time difference counted (0..15 cycles), gate is the
// sync tick, cc is the last gate's total, hit strobes for every coincidence.
// Timing: hit is registered one cycle after the matching event; cc updates
// one cycle after gate. A coincidence whose hit strobe coincides with gate
// is counted in the gate that closes.
module coinc_counter
  import phase_stab_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  ts_t        now,
  input  logic [3:0] window,
  input  logic       gate,
  input  event_t     ev_a,
  input  event_t     ev_b,
  output logic       hit,
  output count_t     cc
);

  logic pa_v, pb_v;
  ts_t  pa_t, pb_t;

  // modular arrival-time differences
  ts_t d_ab, d_ba, d_a_pb, d_b_pa, age_a, age_b;
  logic win_ab, match_a, match_b, hit_next;

  always_comb begin
    d_ab   = ev_a.t - ev_b.t;
    d_ba   = ev_b.t - ev_a.t;
    d_a_pb = ev_a.t - pb_t;
    d_b_pa = ev_b.t - pa_t;
    age_a  = now - pa_t;
    age_b  = now - pb_t;
    win_ab  = (d_ab <= ts_t'(window)) || (d_ba <= ts_t'(window));
    match_a = ev_a.valid && pb_v && (d_a_pb <= ts_t'(window));
    match_b = ev_b.valid && pa_v && (d_b_pa <= ts_t'(window));
    hit_next = (ev_a.valid && ev_b.valid && win_ab) ||
               (ev_a.valid && !ev_b.valid && match_a) ||
               (ev_b.valid && !ev_a.valid && match_b);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pa_v <= 1'b0;
      pb_v <= 1'b0;
      pa_t <= '0;
      pb_t <= '0;
      hit  <= 1'b0;
    end else begin
      hit <= hit_next;
      // expire pending events that can no longer match
      if (pa_v && (age_a > ts_t'(window) + ts_t'(1))) pa_v <= 1'b0;
      if (pb_v && (age_b > ts_t'(window) + ts_t'(1))) pb_v <= 1'b0;
      if (ev_a.valid && ev_b.valid) begin
        if (!win_ab) begin
          pa_v <= 1'b1; pa_t <= ev_a.t;
          pb_v <= 1'b1; pb_t <= ev_b.t;
        end
      end else if (ev_a.valid) begin
        if (match_a) pb_v <= 1'b0;
        else begin
          pa_v <= 1'b1; pa_t <= ev_a.t;
        end
      end else if (ev_b.valid) begin
        if (match_b) pa_v <= 1'b0;
        else begin
          pb_v <= 1'b1; pb_t <= ev_b.t;
        end
      end
    end
  end

  // a coincidence is only ever reported one cycle after an event
  a_hit_has_event: assert property (@(posedge clk) disable iff (!rst_n)
                                    hit |-> $past(ev_a.valid || ev_b.valid));

  gated_counter #(.W(CNT_W)) u_cnt (.clk, .rst_n, .inc(hit), .gate, .snapshot(cc));

endmodule
