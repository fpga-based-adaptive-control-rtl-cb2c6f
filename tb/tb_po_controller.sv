// tb_po_controller: steps po_controller with random intensities in every
// mode (classical, adaptive with user and automatic Imax, sweep, hold) and
// with EnControl toggled, and compares S_ctrl, the step size and the index
// after each step with the integer reference model in po_ref_pkg. Checks the
// one-cycle update latency, and counts wraps at both circular bounds, large
// and minimum adaptive steps and direction reversals; each must occur.
module tb_po_controller;
  import phase_stab_pkg::*;
  import po_ref_pkg::*;
  logic clk = 0, rst_n = 0, step = 0, stepped;
  ctrl_cfg_t cfg;
  count_t i_actual;
  dac_t s_ctrl, dp;
  po_index_e index;
  int checks = 0, failures = 0;
  int n_wrap_hi = 0, n_wrap_lo = 0, n_big = 0, n_min = 0, n_rev = 0, n_sweep = 0;

  po_controller dut (.clk, .rst_n, .cfg, .i_actual, .step, .s_ctrl, .dp, .index, .stepped);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(string n, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("%s: got %0d want %0d", n, got, want);
    end
  endtask

  initial begin
    po_state_t st;
    int ii;
    cfg = default_cfg();
    i_actual = '0;
    st = '{s: 0, idx: 0, i_prev: 0, imax_run: 0, dp: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 3000; n++) begin
      // change the configuration now and then
      if (n % 300 == 0) begin
        automatic int ph = n / 300;
        cfg.mode       = (ph % 5 == 4) ? MODE_SWEEP : (ph % 2) ? MODE_PO : MODE_ADAPTIVE;
        if (ph == 7) cfg.mode = MODE_HOLD;
        cfg.imax_auto  = (ph == 2);
        cfg.p_step     = dac_t'(30 + 20 * ph);
        cfg.s_min      = (ph % 3 == 1) ? dac_t'(200) : dac_t'(0);
        cfg.s_max      = (ph == 5) ? dac_t'(4095) : dac_t'(1700);
        cfg.sweep_step = dac_t'(90 + ph);
      end
      cfg.en_control = (n % 97) > 10;
      // intensity: a noisy fringe of the current control value
      ii = 1500 + int'(1400.0 * $cos(6.2831853 * real'(s_ctrl) / 1700.0 - 1.0))
           + int'($urandom % 200) - 100;
      if ($urandom % 10 == 0) ii = $urandom % 4000;
      i_actual = count_t'(ii);
      step = 1;
      @(posedge clk); #1;
      step = 0;
      st = po_step(st, int'(cfg.mode), cfg.en_control, ii, int'(cfg.imax), cfg.imax_auto,
                   int'(cfg.p_step), int'(cfg.beta), int'(cfg.dp_max), int'(cfg.shift),
                   int'(cfg.s_min), int'(cfg.s_max), int'(cfg.sweep_step));
      expect_eq("stepped", int'(stepped), 1);
      expect_eq("s_ctrl", int'(s_ctrl), st.s);
      expect_eq("dp", int'(dp), st.dp);
      expect_eq("index", int'(index), st.idx);
      if (cfg.mode == MODE_ADAPTIVE && dp > 300) n_big++;
      if (cfg.mode == MODE_ADAPTIVE && dp == cfg.beta) n_min++;
      if (cfg.mode == MODE_SWEEP) n_sweep++;
      if (index == IDX_DOWN && st.s == int'(s_ctrl)) n_rev++;
      if (s_ctrl == cfg.s_min && cfg.mode != MODE_HOLD) n_wrap_hi++;
      if (s_ctrl == cfg.s_max && cfg.mode != MODE_HOLD) n_wrap_lo++;
      // no change between steps
      repeat (2) @(posedge clk); #1;
      expect_eq("hold between steps", int'(s_ctrl), st.s);
    end
    $display("wrap_hi=%0d wrap_lo=%0d big=%0d min=%0d rev=%0d sweep=%0d",
             n_wrap_hi, n_wrap_lo, n_big, n_min, n_rev, n_sweep);
    expect_eq("wrap to s_min seen", int'(n_wrap_hi > 0), 1);
    expect_eq("wrap to s_max seen", int'(n_wrap_lo > 0), 1);
    expect_eq("large adaptive step seen", int'(n_big > 0), 1);
    expect_eq("minimum adaptive step seen", int'(n_min > 0), 1);
    expect_eq("reversal seen", int'(n_rev > 0), 1);
    expect_eq("sweep seen", int'(n_sweep > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
