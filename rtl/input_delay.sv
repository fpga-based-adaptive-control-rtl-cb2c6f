// input_delay: detector input alignment (D_Tg, D_D1, D_D2).
//
// Each detector pulse enters asynchronously. It is first brought into the
// system clock domain by a two-flop synchroniser and then passed through a
// shift register whose tap is chosen at run time, so that the three detector
// channels can be lined up against each other before time stamping. The paper
// states only that each channel has a delay module that compensates
// propagation delays and electronic skew; the clock-cycle granularity, the
// synchroniser and the depth MAX_DELAY are this design's choices.
//
// Interface: din is the raw pulse, delay selects 0..MAX_DELAY-1 extra cycles,
// dout is the delayed, synchronised level.
// Timing: dout follows din after 2 (synchroniser) + 1 (output register)
// + delay clock cycles.
module input_delay #(
  parameter int unsigned MAX_DELAY = 32,
  localparam int unsigned DW = (MAX_DELAY > 1) ? $clog2(MAX_DELAY) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          din,
  input  logic [DW-1:0] delay,
  output logic          dout
);

  logic [1:0]           sync_q;
  logic [MAX_DELAY-1:0] line_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q <= '0;
      line_q <= '0;
      dout   <= 1'b0;
    end else begin
      sync_q <= {sync_q[0], din};
      line_q <= {line_q[MAX_DELAY-2:0], sync_q[1]};
      // tap 0 is the synchroniser output itself
      dout   <= (delay == '0) ? sync_q[1] : line_q[delay - 1'b1];
    end
  end

endmodule
