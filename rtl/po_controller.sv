// po_controller: one stretcher channel of the phase controller.
//
// Implements the Perturb-and-Observe (P&O) loop that keeps an interferometer
// at a maximum of the selected count I. Each sync step the controller nudges
// the control value S_ctrl and, from whether I rose or fell since the last
// step, decides whether to keep going in the same direction or turn round.
// The three-state direction machine (index 0/1/2) follows the published
// algorithms line by line:
//   index 0: if EnControl, S += step, go to 1
//   index 1: I > I_prev ? S += step : (S -= 2*step, go to 2)
//   index 2: I > I_prev ? S -= step : (S += step,   go to 0)
// In MODE_PO the step is a fixed p. In MODE_ADAPTIVE it is
//   dp = (Imax - I) >> shift + beta,
// the published power-of-two form of dp = alpha/Imax*(Imax - I) + beta
// (shift 3, beta 50, at most 562 for 12-bit codes), so the loop takes large
// steps far from the maximum and small ones close to it. After every step
// the circular constraint wraps S: above S_max it restarts at S_min, below
// S_min it restarts at S_max, matching the 2*pi periodicity of the phase.
// MODE_SWEEP ramps S by sweep_step per sync through the same wrap, giving
// the sawtooth used to find S_min/S_max; MODE_HOLD freezes S.
//
// Both algorithms list "I_prev <- I_actual" before the comparison; read as
// software that would always compare equal values, so, as register
// semantics give, the comparison uses I_prev from the previous step.
// This design's own choices: the wrap is applied in MODE_PO as well (the
// classical listing names no bounds, but the code must stay within 12 bits);
// a negative Imax - I counts as zero; dp is clamped to dp_max; with
// imax_auto, Imax is the largest I seen since EnControl last rose; S resets
// to 0.
//
// The top bits of s_wrapped are never used: after the wrap the value lies
// within [S_min, S_max] and so fits 12 bits. cfg.src is read by the apc,
// not here.
//
// Interface: cfg holds the run-time settings, i_actual the statistic of the
// last gate, step a one-cycle strobe once i_actual is valid.
// Timing: s_ctrl, dp and index change one cycle after step; stepped strobes
// in that same cycle.
module po_controller
  import phase_stab_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  ctrl_cfg_t cfg,
  input  count_t    i_actual,
  input  logic      step,
  output dac_t      s_ctrl,
  output dac_t      dp,
  output po_index_e index,
  output logic      stepped
);

  typedef logic signed [S_W-1:0] s_t;

  count_t i_prev_q, imax_run_q, imax_eff, diff;
  logic [CNT_W:0] dp_raw;
  dac_t   step_sz, dp_now;
  logic   rising;
  s_t     s_cur, s_step, s_new, s_wrapped;
  po_index_e index_next;

  always_comb begin
    // adaptive step size
    imax_eff = cfg.imax;
    if (cfg.imax_auto)
      imax_eff = (i_actual > imax_run_q) ? i_actual : imax_run_q;
    diff   = (imax_eff > i_actual) ? (imax_eff - i_actual) : '0;
    dp_raw = {1'b0, diff >> cfg.shift} + (CNT_W+1)'(cfg.beta);
    dp_now = (dp_raw > (CNT_W+1)'(cfg.dp_max)) ? cfg.dp_max : dac_t'(dp_raw);

    step_sz = (cfg.mode == MODE_ADAPTIVE) ? dp_now : cfg.p_step;
    s_step  = s_t'({1'b0, step_sz});
    s_cur   = s_t'({1'b0, s_ctrl});
    rising  = i_actual > i_prev_q;

    s_new      = s_cur;
    index_next = index;
    unique case (cfg.mode)
      MODE_PO, MODE_ADAPTIVE: begin
        unique case (index)
          IDX_START: if (cfg.en_control) begin
            s_new      = s_cur + s_step;
            index_next = IDX_UP;
          end
          IDX_UP: if (rising) s_new = s_cur + s_step;
                  else begin
                    s_new      = s_cur - (s_step <<< 1);
                    index_next = IDX_DOWN;
                  end
          IDX_DOWN: if (rising) s_new = s_cur - s_step;
                    else begin
                      s_new      = s_cur + s_step;
                      index_next = IDX_START;
                    end
          default: index_next = IDX_START;
        endcase
      end
      MODE_SWEEP: begin
        s_new      = s_cur + s_t'({1'b0, cfg.sweep_step});
        index_next = IDX_START;
      end
      default: index_next = IDX_START;  // MODE_HOLD
    endcase

    // circular constraint
    s_wrapped = s_new;
    if (s_new > s_t'({1'b0, cfg.s_max}))      s_wrapped = s_t'({1'b0, cfg.s_min});
    else if (s_new < s_t'({1'b0, cfg.s_min})) s_wrapped = s_t'({1'b0, cfg.s_max});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_ctrl     <= '0;
      dp         <= '0;
      index      <= IDX_START;
      i_prev_q   <= '0;
      imax_run_q <= '0;
      stepped    <= 1'b0;
    end else begin
      stepped <= step;
      if (!cfg.en_control) imax_run_q <= '0;
      if (step) begin
        s_ctrl   <= dac_t'(s_wrapped);
        dp       <= step_sz;
        index    <= index_next;
        i_prev_q <= i_actual;
        if (cfg.en_control && i_actual > imax_run_q) imax_run_q <= i_actual;
      end
    end
  end

  // circular constraint: after a step the code lies within the bounds
  a_in_bounds: assert property (@(posedge clk) disable iff (!rst_n)
                                step && (cfg.s_min <= cfg.s_max) |=>
                                (s_ctrl >= $past(cfg.s_min)) && (s_ctrl <= $past(cfg.s_max)));

endmodule
