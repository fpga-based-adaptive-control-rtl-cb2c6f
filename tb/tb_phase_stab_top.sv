// tb_phase_stab_top: end-to-end test of the phase stabiliser in closed loop
// with the behavioural interferometer model, at a shortened gate
// (SYNC_PERIOD = 48000 cycles, 3000 pair slots per gate, so the coincidence
// counts match the paper's scale of about 3000 per gate).
//
// Sequence: (1) open loop, statistics checked against the model's own pulse
// tallies; (2) sawtooth sweep of ST1 (calibration of the circular bounds);
// (3) adaptive P&O on ST1 maximising Tg&D1 while the noise phase drifts;
// (4) reference-channel switch to Tg&D2; (5) classical P&O on ST2 maximising
// Tg&D1; (6) EnControl released, outputs must freeze. Each phase that closes
// the loop must reach a high count. Mechanisms counted and required: the
// three coincidence types, pending-event expiry (dark counts), sweep wrap,
// circular wrap under control, large and small adaptive steps, direction
// reversals, classical steps, source switch, disabled hold.
module tb_phase_stab_top;
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
    #2s;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int m_cc_tg_d1, m_cc_tg_d2, m_cc_d1_d2, m_expire, m_sweep_wrap, m_ctrl_wrap;
  int m_big_dp, m_small_dp, m_reverse, m_classic, m_switch, m_hold;

  always @(posedge clk) begin
    if (cc_hit[0]) m_cc_tg_d1++;
    if (cc_hit[1]) m_cc_tg_d2++;
    if (cc_hit[2]) m_cc_d1_d2++;
  end
  // pending expiry: a pending D1 event in the Tg&D1 unit cleared without a hit
  logic pb_v_q;
  always @(posedge clk) begin
    pb_v_q <= dut.u_c_tg_d1.pb_v;
    if (pb_v_q && !dut.u_c_tg_d1.pb_v && !cc_hit[0]) m_expire++;
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

  longint last_tg, last_d1, last_d2, last_td1, last_td2, last_d12;
  int gate_no = 0;

  // one gate: wait for the statistics, compare with the model's tallies
  task automatic next_gate(output stats_t s);
    dac_t before1, before2;
    longint e_tg, e_d1, e_d2, e_td1, e_td2, e_d12;
    do begin
      @(posedge clk); #1;
    end while (!stats_valid);
    s = stats;
    e_tg  = ifm.n_tg - last_tg;     last_tg  = ifm.n_tg;
    e_d1  = ifm.n_d1 - last_d1;     last_d1  = ifm.n_d1;
    e_d2  = ifm.n_d2 - last_d2;     last_d2  = ifm.n_d2;
    e_td1 = ifm.n_tg_d1 - last_td1; last_td1 = ifm.n_tg_d1;
    e_td2 = ifm.n_tg_d2 - last_td2; last_td2 = ifm.n_tg_d2;
    e_d12 = ifm.n_d1_d2 - last_d12; last_d12 = ifm.n_d1_d2;
    if (gate_no > 0) begin
      // a pulse at the gate boundary may fall into either gate
      check("cs_tg", near(s.cs_tg, e_tg));
      check("cs_d1", near(s.cs_d1, e_d1));
      check("cs_d2", near(s.cs_d2, e_d2));
      check("cc_tg_d1", near(s.cc_tg_d1, e_td1));
      check("cc_tg_d2", near(s.cc_tg_d2, e_td2));
      check("cc_d1_d2", near(s.cc_d1_d2, e_d12));
    end
    gate_no++;
    before1 = dac1; before2 = dac2;
    // the controllers step two cycles after stats_valid
    @(posedge clk); #1;
    check("no step yet", dac1 == before1 && dac2 == before2);
    @(posedge clk); #1;
    check("stepped", ctrl_stepped);
    if (dac1 < before1 && cfg1.mode == MODE_SWEEP) m_sweep_wrap++;
    if (cfg1.mode == MODE_ADAPTIVE && cfg1.en_control) begin
      if (dp1 > 150) m_big_dp++;
      if (dp1 < 100) m_small_dp++;
      if (int'(dac1) - int'(before1) > 600 || int'(before1) - int'(dac1) > 1200) m_ctrl_wrap++;
    end
    if (cfg2.mode == MODE_PO && cfg2.en_control && dac2 != before2) m_classic++;
    if (index1 == IDX_DOWN || index2 == IDX_DOWN) m_reverse++;
    // drift of the noise phase
    ifm.phi_noise = ifm.phi_noise + 0.03;
  endtask

  // run n gates, return the mean of the chosen count over the last k
  task automatic run_gates(int n, int k, src_sel_e src, output real mean);
    stats_t s;
    real acc = 0.0;
    for (int g = 0; g < n; g++) begin
      next_gate(s);
      if (g >= n - k)
        acc += real'(int'((src == SRC_CC_TG_D1) ? s.cc_tg_d1 : s.cc_tg_d2));
    end
    mean = acc / real'(k);
  endtask

  initial begin
    real mean;
    dac_t f1, f2;
    cfg1 = default_cfg(); cfg1.mode = MODE_HOLD;
    cfg2 = default_cfg(); cfg2.mode = MODE_HOLD;
    // the model delays D1 by 3 and D2 by 5 cycles; line all up with D2
    delay_tg = 5'd5; delay_d1 = 5'd2; delay_d2 = 5'd0;
    coinc_window = 4'd1;
    ifm.phi_noise = 2.0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1 run = 1;

    // (1) open loop
    run_gates(3, 1, SRC_CC_TG_D1, mean);
    $display("open loop: Tg&D1 %0.1f, dac1 %0d", mean, dac1);

    // (2) sawtooth sweep on ST1
    cfg1.mode = MODE_SWEEP; cfg1.sweep_step = 100;
    run_gates(40, 1, SRC_CC_TG_D1, mean);
    cfg1.mode = MODE_HOLD;
    run_gates(1, 1, SRC_CC_TG_D1, mean);

    // (3) adaptive P&O on ST1, maximise Tg&D1, starting from a dark fringe
    ifm.phi_noise = 3.14159 + 6.283185 * (real'(int'(dac1)) - real'(int'(dac2))) / 1700.0;
    run_gates(2, 1, SRC_CC_TG_D1, mean);
    $display("before control: Tg&D1 %0.1f", mean);
    check("starts on a dark fringe", mean < 600.0);
    cfg1.mode = MODE_ADAPTIVE; cfg1.src = SRC_CC_TG_D1; cfg1.en_control = 1;
    run_gates(60, 20, SRC_CC_TG_D1, mean);
    $display("adaptive Tg&D1: mean %0.1f", mean);
    check("adaptive locks Tg&D1", mean > 2200.0);

    // (4) reference channel switch to Tg&D2
    cfg1.src = SRC_CC_TG_D2; m_switch++;
    run_gates(60, 20, SRC_CC_TG_D2, mean);
    $display("adaptive Tg&D2: mean %0.1f", mean);
    check("adaptive locks Tg&D2", mean > 2200.0);

    // (5) classical P&O on ST2, maximise Tg&D1; ST1 released
    cfg1.en_control = 0;
    while (index1 != IDX_START) run_gates(1, 1, SRC_CC_TG_D1, mean);
    cfg1.mode = MODE_HOLD;
    cfg2.mode = MODE_PO; cfg2.p_step = 50; cfg2.src = SRC_CC_TG_D1; cfg2.en_control = 1;
    cfg2.s_max = 4000;
    run_gates(80, 20, SRC_CC_TG_D1, mean);
    $display("classical Tg&D1 on ST2: mean %0.1f", mean);
    check("classical locks Tg&D1", mean > 2000.0);

    // (6) no control: EnControl released, codes freeze once index is 0
    cfg2.en_control = 0;
    run_gates(4, 1, SRC_CC_TG_D1, mean);
    f1 = dac1; f2 = dac2;
    run_gates(5, 1, SRC_CC_TG_D1, mean);
    check("frozen without control", dac1 == f1 && dac2 == f2);
    if (dac1 == f1 && dac2 == f2) m_hold++;

    $display("mechanisms: ccTgD1=%0d ccTgD2=%0d ccD1D2=%0d expire=%0d sweep_wrap=%0d ctrl_wrap=%0d",
             m_cc_tg_d1, m_cc_tg_d2, m_cc_d1_d2, m_expire, m_sweep_wrap, m_ctrl_wrap);
    $display("mechanisms: big_dp=%0d small_dp=%0d reverse=%0d classic=%0d switch=%0d hold=%0d",
             m_big_dp, m_small_dp, m_reverse, m_classic, m_switch, m_hold);
    check("mech cc Tg&D1", m_cc_tg_d1 > 0);
    check("mech cc Tg&D2", m_cc_tg_d2 > 0);
    check("mech cc D1&D2", m_cc_d1_d2 > 0);
    check("mech pending expiry", m_expire > 0);
    check("mech sweep wrap", m_sweep_wrap > 0);
    check("mech control wrap", m_ctrl_wrap > 0);
    check("mech large step", m_big_dp > 0);
    check("mech small step", m_small_dp > 0);
    check("mech reversal", m_reverse > 0);
    check("mech classical", m_classic > 0);
    check("mech source switch", m_switch > 0);
    check("mech hold", m_hold > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
