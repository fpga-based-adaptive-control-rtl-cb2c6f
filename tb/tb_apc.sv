// tb_apc: feeds random statistics to the APC with the two channels on
// different sources and algorithms, switches sources part-way, and checks
// both DAC codes against the reference model fed with the statistic each
// channel should have selected. Checks the two-cycle latency from
// stats_valid to the DAC update.
module tb_apc;
  import phase_stab_pkg::*;
  import po_ref_pkg::*;
  logic clk = 0, rst_n = 0, stats_valid = 0, stepped;
  stats_t stats;
  ctrl_cfg_t cfg1, cfg2;
  dac_t dac1, dac2, dp1, dp2;
  po_index_e index1, index2;
  int checks = 0, failures = 0;

  apc dut (.clk, .rst_n, .stats, .stats_valid, .cfg1, .cfg2, .dac1, .dac2,
           .dp1, .dp2, .index1, .index2, .stepped);

  always #5 clk = ~clk;

  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int sel(stats_t s, src_sel_e e);
    case (e)
      SRC_CC_TG_D1: return int'(s.cc_tg_d1);
      SRC_CC_TG_D2: return int'(s.cc_tg_d2);
      SRC_CC_D1_D2: return int'(s.cc_d1_d2);
      SRC_CS_TG:    return int'(s.cs_tg);
      SRC_CS_D1:    return int'(s.cs_d1);
      default:      return int'(s.cs_d2);
    endcase
  endfunction

  task automatic expect_eq(string n, int got, int want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("%s: got %0d want %0d", n, got, want);
    end
  endtask

  initial begin
    po_state_t s1, s2;
    dac_t old1, old2;
    cfg1 = default_cfg(); cfg1.en_control = 1;
    cfg2 = default_cfg(); cfg2.en_control = 1; cfg2.mode = MODE_PO; cfg2.p_step = 70;
    cfg2.src = SRC_CC_TG_D2; cfg2.s_max = 4000;
    s1 = '{s: 0, idx: 0, i_prev: 0, imax_run: 0, dp: 0};
    s2 = s1;
    stats = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 600; n++) begin
      if (n == 200) begin cfg1.src = SRC_CC_TG_D2; cfg2.src = SRC_CC_TG_D1; end
      if (n == 400) begin cfg1.src = SRC_CS_D1;   cfg2.src = SRC_CC_D1_D2; end
      stats.cs_tg    = count_t'($urandom % 100000);
      stats.cs_d1    = count_t'($urandom % 3000);
      stats.cs_d2    = count_t'($urandom % 50000);
      stats.cc_tg_d1 = count_t'($urandom % 3200);
      stats.cc_tg_d2 = count_t'($urandom % 3200);
      stats.cc_d1_d2 = count_t'($urandom % 100);
      old1 = dac1; old2 = dac2;
      stats_valid = 1;
      @(posedge clk); #1;
      stats_valid = 0;
      s1 = po_step(s1, int'(cfg1.mode), 1, sel(stats, cfg1.src), int'(cfg1.imax), 0,
                   int'(cfg1.p_step), int'(cfg1.beta), int'(cfg1.dp_max), int'(cfg1.shift),
                   int'(cfg1.s_min), int'(cfg1.s_max), int'(cfg1.sweep_step));
      s2 = po_step(s2, int'(cfg2.mode), 1, sel(stats, cfg2.src), int'(cfg2.imax), 0,
                   int'(cfg2.p_step), int'(cfg2.beta), int'(cfg2.dp_max), int'(cfg2.shift),
                   int'(cfg2.s_min), int'(cfg2.s_max), int'(cfg2.sweep_step));
      // one cycle after stats_valid nothing has moved yet
      expect_eq("dac1 not yet", int'(dac1), int'(old1));
      expect_eq("dac2 not yet", int'(dac2), int'(old2));
      @(posedge clk); #1;
      expect_eq("stepped", int'(stepped), 1);
      expect_eq("dac1", int'(dac1), s1.s);
      expect_eq("dac2", int'(dac2), s2.s);
      expect_eq("dp1", int'(dp1), s1.dp);
      expect_eq("index2", int'(index2), s2.idx);
      // statistics change between gates must not disturb the outputs
      stats = '0;
      repeat (3) @(posedge clk); #1;
      expect_eq("dac1 held", int'(dac1), s1.s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
