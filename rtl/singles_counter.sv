// singles_counter: individual pulse counting (CS) for Tg, D1 and D2.
//
// Integrates the event rate of each of the three detector channels over one
// gate period with a 24-bit counter per channel, as the paper describes, and
// presents the totals of the last complete gate to the controller and to the
// CPU readout.
//
// Interface: ev_* are the stamped events of the three channels (only their
// strobes are counted; the arrival times matter to the coincidence units);
// gate is the sync tick; cs_* hold the last gate's totals.
// Timing: cs_* update one cycle after gate.
module singles_counter
  import phase_stab_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   gate,
  input  logic   ev_tg,
  input  logic   ev_d1,
  input  logic   ev_d2,
  output count_t cs_tg,
  output count_t cs_d1,
  output count_t cs_d2
);

  gated_counter #(.W(CNT_W)) u_tg (.clk, .rst_n, .inc(ev_tg), .gate, .snapshot(cs_tg));
  gated_counter #(.W(CNT_W)) u_d1 (.clk, .rst_n, .inc(ev_d1), .gate, .snapshot(cs_d1));
  gated_counter #(.W(CNT_W)) u_d2 (.clk, .rst_n, .inc(ev_d2), .gate, .snapshot(cs_d2));

endmodule
