// phase_stab_pkg: types and constants shared by the coincidence-counting and
// phase-control blocks.
//
// Widths that come from the published design: arrival times are 8 bits,
// singles and coincidence counters are 24 bits, and the stretcher drive is a
// 12-bit DAC code (4096 levels). The adaptive step constants (alpha/Imax = 1/8
// realised as a shift by 3, beta = 50, largest step 562) and the circular
// constraint's upper bound (1700) are the published example values.
// Everything else here (clock rate, enum encodings, struct layouts, the fixed
// classical step and the sweep step) is this design's own choice.
package phase_stab_pkg;

  localparam int unsigned TS_W    = 8;   // arrival-time width
  localparam int unsigned CNT_W   = 24;  // singles / coincidence counter width
  localparam int unsigned DAC_W   = 12;  // DAC code width
  localparam int unsigned S_W     = 14;  // signed working width of S_ctrl

  typedef logic [TS_W-1:0]  ts_t;
  typedef logic [CNT_W-1:0] count_t;
  typedef logic [DAC_W-1:0] dac_t;

  // Default numbers of the published adaptive example.
  localparam int unsigned ADAPT_SHIFT_DEF = 3;    // dp = (Imax - I)/8 + beta
  localparam int unsigned BETA_DEF        = 50;   // smallest adaptive step
  localparam int unsigned DP_MAX_DEF      = 562;  // largest adaptive step
  localparam int unsigned S_MIN_DEF       = 0;    // lower circular bound
  localparam int unsigned S_MAX_DEF       = 1700; // upper circular bound
  localparam int unsigned IMAX_DEF        = 3000; // reference maximum count

  // One detector event after time-of-arrival stamping.
  typedef struct packed {
    logic valid;  // one-cycle strobe
    ts_t  t;      // arrival time, modulo 2**TS_W clock cycles
  } event_t;

  // Statistics of one gate period, as seen by the controller and the CPU.
  typedef enum logic [2:0] {
    SRC_CC_TG_D1 = 3'd0,
    SRC_CC_TG_D2 = 3'd1,
    SRC_CC_D1_D2 = 3'd2,
    SRC_CS_TG    = 3'd3,
    SRC_CS_D1    = 3'd4,
    SRC_CS_D2    = 3'd5
  } src_sel_e;

  typedef struct packed {
    count_t cs_tg;
    count_t cs_d1;
    count_t cs_d2;
    count_t cc_tg_d1;
    count_t cc_tg_d2;
    count_t cc_d1_d2;
  } stats_t;

  // Controller operating mode of one stretcher channel.
  typedef enum logic [1:0] {
    MODE_HOLD     = 2'd0,  // keep S_ctrl where it is
    MODE_PO       = 2'd1,  // classical P&O, fixed step p
    MODE_ADAPTIVE = 2'd2,  // adaptive P&O, step dp from Imax - I
    MODE_SWEEP    = 2'd3   // sawtooth between S_min and S_max
  } ctrl_mode_e;

  // P&O direction state ("index" of Algorithms 1 and 2).
  typedef enum logic [1:0] {
    IDX_START = 2'd0,
    IDX_UP    = 2'd1,
    IDX_DOWN  = 2'd2
  } po_index_e;

  // Run-time settings of one stretcher channel.
  typedef struct packed {
    ctrl_mode_e mode;
    logic       en_control;  // EnControl of Algorithms 1 and 2
    src_sel_e   src;         // statistic to maximise
    logic       imax_auto;   // 1: Imax is the largest I seen while enabled
    count_t     imax;        // user Imax when imax_auto = 0
    dac_t       p_step;      // fixed step of the classical P&O
    dac_t       beta;        // smallest adaptive step
    dac_t       dp_max;      // largest adaptive step
    logic [3:0] shift;       // log2(Imax/alpha)
    dac_t       s_min;       // circular constraint, lower bound
    dac_t       s_max;       // circular constraint, upper bound
    dac_t       sweep_step;  // sawtooth increment per sync
  } ctrl_cfg_t;

  // Settings that reproduce the published adaptive example on one channel.
  function automatic ctrl_cfg_t default_cfg();
    ctrl_cfg_t c;
    c.mode       = MODE_ADAPTIVE;
    c.en_control = 1'b0;
    c.src        = SRC_CC_TG_D1;
    c.imax_auto  = 1'b0;
    c.imax       = count_t'(IMAX_DEF);
    c.p_step     = dac_t'(BETA_DEF);
    c.beta       = dac_t'(BETA_DEF);
    c.dp_max     = dac_t'(DP_MAX_DEF);
    c.shift      = 4'(ADAPT_SHIFT_DEF);
    c.s_min      = dac_t'(S_MIN_DEF);
    c.s_max      = dac_t'(S_MAX_DEF);
    c.sweep_step = dac_t'(100);
    return c;
  endfunction

endpackage
