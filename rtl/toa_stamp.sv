// toa_stamp: time-of-arrival module (T_Tg, T_D1, T_D2).
//
// Detects the rising edge of an aligned detector level and records the
// arrival time as an 8-bit value read from a time base that all channels
// share, so that arrival times of different channels can be compared. The
// 8-bit arrival time follows the paper; it refers elsewhere for how its
// time-of-arrival stage resolves arrivals, so this module resolves them to
// one clock period, which is this design's own simplification.
//
// Interface: level is the output of input_delay, now is the shared free-
// running time base. ev.valid is a one-cycle strobe with ev.t the value of
// now in the cycle the edge was seen.
// Timing: ev is registered, one cycle after the edge reaches level.
module toa_stamp
  import phase_stab_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   level,
  input  ts_t    now,
  output event_t ev
);

  logic level_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      level_q <= 1'b0;
      ev      <= '0;
    end else begin
      level_q  <= level;
      ev.valid <= level & ~level_q;
      if (level & ~level_q) ev.t <= now;
    end
  end

endmodule
