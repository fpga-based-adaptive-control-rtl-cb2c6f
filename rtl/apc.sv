// apc: adaptive phase controller (APC).
//
// Takes the singles (CS) and coincidence (CC) totals of the last gate and
// runs one P&O controller per stretcher, producing the two 12-bit codes for
// DAC1 (stretcher ST1) and DAC2 (stretcher ST2). Each channel has its own
// settings, including which statistic it maximises; switching that source
// (for example from Tg&D1 to Tg&D2) moves the operating point to the
// complementary fringe, which is the "reference channel transition" of the
// paper. That the APC drives two DACs from the CS/CC statistics is the
// paper's; how the two stretchers share the statistics is not stated, and
// giving each channel an independent controller and source selector is this
// design's choice.
//
// Interface: stats is the last gate's totals, stats_valid strobes once they
// are updated; cfg1/cfg2 configure the ST1/ST2 channels.
// Timing: dac codes update two cycles after stats_valid (one for the
// registered source select, one in the controller).
module apc
  import phase_stab_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  stats_t    stats,
  input  logic      stats_valid,
  input  ctrl_cfg_t cfg1,
  input  ctrl_cfg_t cfg2,
  output dac_t      dac1,
  output dac_t      dac2,
  output dac_t      dp1,
  output dac_t      dp2,
  output po_index_e index1,
  output po_index_e index2,
  output logic      stepped
);

  function automatic count_t pick(input stats_t s, input src_sel_e sel);
    unique case (sel)
      SRC_CC_TG_D1: return s.cc_tg_d1;
      SRC_CC_TG_D2: return s.cc_tg_d2;
      SRC_CC_D1_D2: return s.cc_d1_d2;
      SRC_CS_TG:    return s.cs_tg;
      SRC_CS_D1:    return s.cs_d1;
      SRC_CS_D2:    return s.cs_d2;
      default:      return s.cc_tg_d1;
    endcase
  endfunction

  count_t i1_q, i2_q;
  logic   step_q;
  logic   stepped1, stepped2;

  assign stepped = stepped1 & stepped2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i1_q   <= '0;
      i2_q   <= '0;
      step_q <= 1'b0;
    end else begin
      step_q <= stats_valid;
      if (stats_valid) begin
        i1_q <= pick(stats, cfg1.src);
        i2_q <= pick(stats, cfg2.src);
      end
    end
  end

  po_controller u_ch1 (.clk, .rst_n, .cfg(cfg1), .i_actual(i1_q), .step(step_q),
                       .s_ctrl(dac1), .dp(dp1), .index(index1), .stepped(stepped1));
  po_controller u_ch2 (.clk, .rst_n, .cfg(cfg2), .i_actual(i2_q), .step(step_q),
                       .s_ctrl(dac2), .dp(dp2), .index(index2), .stepped(stepped2));

endmodule
