// gated_counter: 24-bit event counter integrated over one gate period.
//
// Counts one-cycle inc strobes. On gate (the sync tick) the running total,
// including an inc in the same cycle, is copied to snapshot and the running
// count restarts from zero. The count saturates at 2**W-1 rather than
// wrapping; saturation is this design's choice.
//
// Timing: snapshot changes one cycle after gate.
module gated_counter #(
  parameter int unsigned W = 24
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         inc,
  input  logic         gate,
  output logic [W-1:0] snapshot
);

  logic [W-1:0] cnt_q;
  logic [W-1:0] cnt_next;

  always_comb begin
    cnt_next = cnt_q;
    if (inc && (cnt_q != '1)) cnt_next = cnt_q + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q    <= '0;
      snapshot <= '0;
    end else if (gate) begin
      snapshot <= cnt_next;
      cnt_q    <= '0;
    end else begin
      cnt_q    <= cnt_next;
    end
  end

endmodule
