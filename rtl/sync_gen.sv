// sync_gen: gate timer that produces the controller's sync pulse.
//
// The feedback loop runs at 1 Hz: counts are integrated for one second, then
// the phase controller takes one step. This block divides the system clock
// down to that rate and emits a one-cycle tick at the end of each gate. The
// 1 Hz rate is from the paper; the 100 MHz clock (hence PERIOD = 10^8) is
// this design's assumption, as the paper does not state a clock frequency.
//
// Interface: run enables counting (when low the timer is held at zero);
// tick is high for one cycle every PERIOD cycles of run.
// Timing: the first tick comes PERIOD cycles after run rises.
module sync_gen #(
  parameter int unsigned PERIOD = 100_000_000,
  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic run,
  output logic tick
);

  logic [CW-1:0] cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q <= '0;
      tick  <= 1'b0;
    end else if (!run) begin
      cnt_q <= '0;
      tick  <= 1'b0;
    end else if (cnt_q == CW'(PERIOD - 1)) begin
      cnt_q <= '0;
      tick  <= 1'b1;
    end else begin
      cnt_q <= cnt_q + 1'b1;
      tick  <= 1'b0;
    end
  end

  // the sync pulse is a single-cycle strobe
  a_tick_single: assert property (@(posedge clk) disable iff (!rst_n)
                                  (PERIOD > 1) && tick |=> !tick);

endmodule
