// tb_phase_stab_top_full: the phase stabiliser at its default parameters
// (100 MHz clock, 1 s gate of 10^8 cycles) with the behavioural
// interferometer at the count rates of the paper's experiment (about 3000
// heralded pairs per second, so up to about 3000 coincidences per gate).
//
// One complete feedback operation: three gates of the adaptive controller on
// ST1 maximising Tg&D1. For every gate the six 24-bit totals are compared
// with the model's own pulse tallies, and the controller's step is checked
// against dp = (Imax - CC)/8 + 50 computed here from the reported count.
module tb_phase_stab_top_full;
  import phase_stab_pkg::*;

  logic clk = 0, rst_n = 0, run = 0;
  logic tg, d1, d2;
  logic [4:0] delay_tg, delay_d1, delay_d2;
  logic [3:0] coinc_window;
  ctrl_cfg_t cfg1, cfg2;
  logic sync_tick, stats_valid, ctrl_stepped;
  stats_t stats;
  dac_t dac1, dac2, dp1, dp2;
  po_index_e index1, index2;
  logic [2:0] cc_hit;
  int checks = 0, failures = 0;

  phase_stab_top dut (
    .clk, .rst_n, .tg_in(tg), .d1_in(d1), .d2_in(d2), .run,
    .delay_tg, .delay_d1, .delay_d2, .coinc_window, .cfg1, .cfg2,
    .sync_tick, .stats, .stats_valid, .dac1, .dac2, .dp1, .dp2,
    .index1, .index2, .ctrl_stepped, .cc_hit);

  // 240 ppm of 8-cycle slots = 3000 pairs per 10^8 cycles
  interferometer_model #(.SLOT(8), .PAIR_PPM(240), .DARK_PPM(40),
                         .DLY_TG(0), .DLY_D1(3), .DLY_D2(5))
    ifm (.clk, .dac1, .dac2, .tg, .d1, .d2);

  always #5 clk = ~clk;   // 100 MHz

  initial begin
    #5s;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string n, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", n, $time);
    end
  endtask

  function automatic bit near(count_t got, longint want);
    longint d = longint'(got) - want;
    return (d >= -2) && (d <= 2);
  endfunction

  initial begin
    longint l_tg = 0, l_td1 = 0, l_td2 = 0, l_d1 = 0, l_d2 = 0, l_d12 = 0;
    longint t_valid, t_prev;
    int dp_want, s_before, s_want;
    cfg1 = default_cfg(); cfg1.en_control = 1;   // adaptive, Tg&D1, Imax 3000
    cfg2 = default_cfg(); cfg2.mode = MODE_HOLD;
    delay_tg = 5'd5; delay_d1 = 5'd2; delay_d2 = 5'd0;
    coinc_window = 4'd1;
    ifm.phi_noise = 2.5;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 run = 1;
    t_prev = $time;
    for (int g = 0; g < 3; g++) begin
      s_before = int'(dac1);
      do begin
        @(posedge clk); #1;
      end while (!stats_valid);
      t_valid = $time;
      // one gate = 10^8 cycles of 10 time units
      if (g > 0) check("gate length", (t_valid - t_prev) == 64'd1_000_000_000);
      t_prev = t_valid;
      $display("gate %0d: Tg %0d D1 %0d D2 %0d | Tg&D1 %0d Tg&D2 %0d D1&D2 %0d | dac1 %0d",
               g, stats.cs_tg, stats.cs_d1, stats.cs_d2, stats.cc_tg_d1,
               stats.cc_tg_d2, stats.cc_d1_d2, dac1);
      check("cs_tg", near(stats.cs_tg, ifm.n_tg - l_tg));
      check("cc_tg_d1", near(stats.cc_tg_d1, ifm.n_tg_d1 - l_td1));
      check("cc_tg_d2", near(stats.cc_tg_d2, ifm.n_tg_d2 - l_td2));
      check("pairs at paper scale", stats.cs_tg > 2500 && stats.cs_tg < 3500);
      check("cs_d1", near(stats.cs_d1, ifm.n_d1 - l_d1));
      check("cs_d2", near(stats.cs_d2, ifm.n_d2 - l_d2));
      check("cc_d1_d2", near(stats.cc_d1_d2, ifm.n_d1_d2 - l_d12));
      l_tg = ifm.n_tg; l_td1 = ifm.n_tg_d1; l_td2 = ifm.n_tg_d2;
      l_d1 = ifm.n_d1; l_d2 = ifm.n_d2; l_d12 = ifm.n_d1_d2;
      // predicted adaptive step from the reported count
      dp_want = ((3000 > int'(stats.cc_tg_d1)) ? (3000 - int'(stats.cc_tg_d1)) : 0) / 8 + 50;
      if (dp_want > 562) dp_want = 562;
      repeat (2) @(posedge clk); #1;
      check("stepped", ctrl_stepped);
      check("dp", int'(dp1) == dp_want);
      // the first step from index 0 always moves up by dp
      if (g == 0) begin
        s_want = s_before + dp_want;
        if (s_want > 1700) s_want = 0;
        check("first step", int'(dac1) == s_want);
      end else begin
        check("step size", (int'(dac1) - s_before == dp_want) ||
                           (s_before - int'(dac1) == 2 * dp_want) ||
                           (s_before - int'(dac1) == dp_want) ||
                           (int'(dac1) == 0) || (int'(dac1) == 1700));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
