// tb_workload_stabilization: the experiment of the paper in miniature,
// comparing classical and adaptive P&O on the same drifting interferometer.
//
// For each algorithm the loop starts on a dark fringe of the controlled
// channel, locks onto Tg&D1, then the reference channel is switched to Tg&D2
// (the paper's "reference channel transition"), and finally control is
// released. For each transient the 10%-90% rise time is measured in gates
// (one gate is one second of the real system) and the steady-state standard
// deviation of the locked count is reported. The gate is shortened to 48000
// cycles with the pair rate raised so that a gate still holds about 3000
// pairs, the count scale of the paper. The classical fixed step p = 50 is an
// assumed value. Checks: both algorithms lock, and the adaptive rise time is
// shorter than the classical one, the paper's main claim.
module tb_workload_stabilization;
  import phase_stab_pkg::*;

  localparam int unsigned PERIOD = 48000;

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

  phase_stab_top #(.SYNC_PERIOD(PERIOD)) dut (
    .clk, .rst_n, .tg_in(tg), .d1_in(d1), .d2_in(d2), .run,
    .delay_tg, .delay_d1, .delay_d2, .coinc_window, .cfg1, .cfg2,
    .sync_tick, .stats, .stats_valid, .dac1, .dac2, .dp1, .dp2,
    .index1, .index2, .ctrl_stepped, .cc_hit);

  interferometer_model #(.SLOT(8), .PAIR_PPM(500000), .DARK_PPM(20000),
                         .DLY_TG(0), .DLY_D1(3), .DLY_D2(5))
    ifm (.clk, .dac1, .dac2, .tg, .d1, .d2);

  always #5 clk = ~clk;

  initial begin
    #3s;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string n, bit ok);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", n);
    end
  endtask

  // wait for one gate's statistics; the noise phase drifts every gate
  task automatic gate(output int td1, output int td2);
    do begin
      @(posedge clk); #1;
    end while (!stats_valid);
    td1 = int'(stats.cc_tg_d1);
    td2 = int'(stats.cc_tg_d2);
    ifm.phi_noise = ifm.phi_noise + 0.02 + 0.02 * (real'($urandom % 1000) / 1000.0 - 0.5);
  endtask

  // run n gates on one channel; return 10-90 % rise time and locked std
  task automatic transient(int n, bit use_d2, output int t_rise, output real mean,
                           output real sd);
    int c[200];
    int a, b, lo, hi, t10, t90;
    real acc, acc2;
    for (int g = 0; g < n; g++) begin
      gate(a, b);
      c[g] = use_d2 ? b : a;
    end
    acc = 0; acc2 = 0;
    for (int g = n - 30; g < n; g++) begin
      acc += real'(c[g]); acc2 += real'(c[g]) * real'(c[g]);
    end
    mean = acc / 30.0;
    sd   = $sqrt(acc2 / 30.0 - mean * mean);
    lo = c[0];
    hi = int'(mean);
    t10 = -1; t90 = -1;
    for (int g = 0; g < n; g++) begin
      if (t10 < 0 && c[g] >= lo + (hi - lo) / 10) t10 = g;
      if (t90 < 0 && c[g] >= lo + (hi - lo) * 9 / 10) t90 = g;
    end
    t_rise = t90 - t10;
  endtask

  task automatic run_algorithm(ctrl_mode_e mode, output real rise, output real sd_avg);
    int r1, r2, a, b;
    real m1, s1, m2, s2;
    cfg1 = default_cfg();
    cfg1.mode = mode; cfg1.p_step = 50; cfg1.src = SRC_CC_TG_D1;
    // dark fringe of Tg&D1
    ifm.phi_noise = 3.14159 + 6.283185 * (real'(int'(dac1)) - real'(int'(dac2))) / 1700.0;
    gate(a, b);
    cfg1.en_control = 1;
    transient(90, 0, r1, m1, s1);
    cfg1.src = SRC_CC_TG_D2;       // reference channel transition
    transient(90, 1, r2, m2, s2);
    $display("%s: Tg&D1 rise %0d gates, mean %0.0f std %0.1f | Tg&D2 rise %0d gates, mean %0.0f std %0.1f",
             mode.name(), r1, m1, s1, r2, m2, s2);
    check("locks Tg&D1", m1 > 2300.0);
    check("locks Tg&D2", m2 > 2300.0);
    rise = real'(r1 + r2) / 2.0;
    sd_avg = (s1 + s2) / 2.0;
    // release control and let the index return to 0
    cfg1.en_control = 0;
    while (index1 != IDX_START) gate(a, b);
    cfg1.mode = MODE_HOLD;
  endtask

  initial begin
    real rise_po, rise_ad, sd_po, sd_ad;
    cfg1 = default_cfg(); cfg1.mode = MODE_HOLD;
    cfg2 = default_cfg(); cfg2.mode = MODE_HOLD;
    delay_tg = 5'd5; delay_d1 = 5'd2; delay_d2 = 5'd0;
    coinc_window = 4'd1;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 run = 1;
    run_algorithm(MODE_PO, rise_po, sd_po);
    run_algorithm(MODE_ADAPTIVE, rise_ad, sd_ad);
    $display("rise time: classical %0.1f gates, adaptive %0.1f gates (%0.0f %% shorter)",
             rise_po, rise_ad, 100.0 * (rise_po - rise_ad) / rise_po);
    $display("locked std: classical %0.1f, adaptive %0.1f (%0.0f %% lower)",
             sd_po, sd_ad, 100.0 * (sd_po - sd_ad) / sd_po);
    check("adaptive rise time shorter", rise_ad < rise_po);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
