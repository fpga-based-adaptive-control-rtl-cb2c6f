// phase_stab_top: FPGA phase acquisition and control for two cascaded
// unbalanced (Franson) fibre interferometers.
//
// Three detector inputs, the herald/trigger Tg and the two output detectors
// D1 and D2, are each aligned by a delay stage (input_delay) and stamped with
// an 8-bit arrival time (toa_stamp) from a shared time base. Once per gate
// (1 Hz, sync_gen) the design reports the singles of Tg, D1 and D2
// (singles_counter) and the coincidences Tg&D1, Tg&D2 and D1&D2
// (coinc_counter), all as 24-bit totals. The same totals feed the phase
// controller (apc), which runs classical or adaptive Perturb-and-Observe on a
// chosen statistic and drives two 12-bit DAC codes for the fibre stretchers
// ST1 and ST2. The DACs, amplifiers, stretchers, the embedded CPU and the
// host link are outside this module: the DAC codes leave as ports, and the
// statistics are brought out as ports for the CPU's readout.
//
// Interface: tg_in/d1_in/d2_in are raw detector pulses; run starts the gate
// timer; delay_* align the channels; coinc_window is the coincidence window
// in clock cycles; cfg1/cfg2 configure the ST1/ST2 controllers (mode,
// EnControl, source, Imax, steps, circular bounds).
// Timing: a pulse reaches the counters 2 + 1 + delay + 1 cycles after it
// arrives (coincidences one more). A gate closes every SYNC_PERIOD cycles
// with sync_tick; stats and stats_valid follow one cycle later and the DAC
// codes two cycles after that.
module phase_stab_top
  import phase_stab_pkg::*;
#(
  parameter int unsigned MAX_DELAY   = 32,
  parameter int unsigned SYNC_PERIOD = 100_000_000,
  localparam int unsigned DW = (MAX_DELAY > 1) ? $clog2(MAX_DELAY) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // detectors
  input  logic          tg_in,
  input  logic          d1_in,
  input  logic          d2_in,
  // settings
  input  logic          run,
  input  logic [DW-1:0] delay_tg,
  input  logic [DW-1:0] delay_d1,
  input  logic [DW-1:0] delay_d2,
  input  logic [3:0]    coinc_window,
  input  ctrl_cfg_t     cfg1,
  input  ctrl_cfg_t     cfg2,
  // readout
  output logic          sync_tick,
  output stats_t        stats,
  output logic          stats_valid,
  // stretcher drive
  output dac_t          dac1,
  output dac_t          dac2,
  output dac_t          dp1,
  output dac_t          dp2,
  output po_index_e     index1,
  output po_index_e     index2,
  output logic          ctrl_stepped,
  output logic [2:0]    cc_hit        // coincidence strobes {D1&D2, Tg&D2, Tg&D1}
);

  // shared arrival-time base
  ts_t now_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now_q <= '0;
    else        now_q <= now_q + 1'b1;
  end

  logic   lvl_tg, lvl_d1, lvl_d2;
  event_t ev_tg, ev_d1, ev_d2;

  input_delay #(.MAX_DELAY(MAX_DELAY)) u_d_tg (.clk, .rst_n, .din(tg_in), .delay(delay_tg), .dout(lvl_tg));
  input_delay #(.MAX_DELAY(MAX_DELAY)) u_d_d1 (.clk, .rst_n, .din(d1_in), .delay(delay_d1), .dout(lvl_d1));
  input_delay #(.MAX_DELAY(MAX_DELAY)) u_d_d2 (.clk, .rst_n, .din(d2_in), .delay(delay_d2), .dout(lvl_d2));

  toa_stamp u_t_tg (.clk, .rst_n, .level(lvl_tg), .now(now_q), .ev(ev_tg));
  toa_stamp u_t_d1 (.clk, .rst_n, .level(lvl_d1), .now(now_q), .ev(ev_d1));
  toa_stamp u_t_d2 (.clk, .rst_n, .level(lvl_d2), .now(now_q), .ev(ev_d2));

  sync_gen #(.PERIOD(SYNC_PERIOD)) u_sync (.clk, .rst_n, .run, .tick(sync_tick));

  singles_counter u_cs (
    .clk, .rst_n, .gate(sync_tick),
    .ev_tg(ev_tg.valid), .ev_d1(ev_d1.valid), .ev_d2(ev_d2.valid),
    .cs_tg(stats.cs_tg), .cs_d1(stats.cs_d1), .cs_d2(stats.cs_d2)
  );

  logic hit_tg_d1, hit_tg_d2, hit_d1_d2;
  assign cc_hit = {hit_d1_d2, hit_tg_d2, hit_tg_d1};

  coinc_counter u_c_tg_d1 (.clk, .rst_n, .now(now_q), .window(coinc_window), .gate(sync_tick),
                           .ev_a(ev_tg), .ev_b(ev_d1), .hit(hit_tg_d1), .cc(stats.cc_tg_d1));
  coinc_counter u_c_tg_d2 (.clk, .rst_n, .now(now_q), .window(coinc_window), .gate(sync_tick),
                           .ev_a(ev_tg), .ev_b(ev_d2), .hit(hit_tg_d2), .cc(stats.cc_tg_d2));
  coinc_counter u_c_d1_d2 (.clk, .rst_n, .now(now_q), .window(coinc_window), .gate(sync_tick),
                           .ev_a(ev_d1), .ev_b(ev_d2), .hit(hit_d1_d2), .cc(stats.cc_d1_d2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) stats_valid <= 1'b0;
    else        stats_valid <= sync_tick;
  end

  apc u_apc (
    .clk, .rst_n, .stats, .stats_valid, .cfg1, .cfg2,
    .dac1, .dac2, .dp1, .dp2, .index1, .index2, .stepped(ctrl_stepped)
  );

endmodule
