// interferometer_model: behavioural model (not synthesizable) of the optical
// set-up and the three single-photon detectors, for the testbenches.
//
// Time is cut into slots of SLOT clock cycles. In each slot a photon pair is
// created with probability PAIR_PPM/10^6. The herald photon always gives a
// Tg pulse; its twin reaches D1 with probability (1 + v cos(dphi))/2 and D2
// otherwise, where dphi = phi_noise + 2*pi*(dac2 - dac1)/CODES_2PI is the
// phase of the two cascaded interferometers set by the stretcher codes. Dark
// counts add unpartnered D1/D2 pulses with probability DARK_PPM/10^6 per
// slot. Each pulse is 2 cycles wide and reaches the FPGA pin after a fixed
// cable delay (DLY_*), which the delay stages have to undo. phi_noise is a
// variable the testbench moves to emulate drift.
module interferometer_model #(
  parameter int SLOT      = 8,
  parameter int PAIR_PPM  = 500000,
  parameter int DARK_PPM  = 20000,
  parameter int CODES_2PI = 1700,
  parameter int DLY_TG    = 0,
  parameter int DLY_D1    = 3,
  parameter int DLY_D2    = 5
) (
  input  logic        clk,
  input  logic [11:0] dac1,
  input  logic [11:0] dac2,
  output logic        tg,
  output logic        d1,
  output logic        d2
);
  real phi_noise = 0.0;
  real vis = 0.9;
  int  slot_cnt = 0;
  logic [15:0] sr_tg = '0, sr_d1 = '0, sr_d2 = '0;
  longint pairs = 0, to_d1 = 0, to_d2 = 0;
  // slots that hold both pulses of a pair of channels (true coincidences)
  longint n_tg = 0, n_d1 = 0, n_d2 = 0, n_tg_d1 = 0, n_tg_d2 = 0, n_d1_d2 = 0;

  assign tg = sr_tg[0];
  assign d1 = sr_d1[0];
  assign d2 = sr_d2[0];

  function automatic real prob_d1();
    real dphi = phi_noise + 6.283185307 * (real'(int'(dac2)) - real'(int'(dac1))) / real'(CODES_2PI);
    return 0.5 * (1.0 + vis * $cos(dphi));
  endfunction

  always @(posedge clk) begin
    logic [15:0] ntg, nd1, nd2;
    int unsigned dark;
    ntg = sr_tg >> 1; nd1 = sr_d1 >> 1; nd2 = sr_d2 >> 1;
    if (slot_cnt == 0) begin
      if (($urandom % 1000000) < PAIR_PPM) begin
        pairs++;
        ntg[DLY_TG +: 2] = 2'b11;
        if (real'($urandom % 1000000) / 1.0e6 < prob_d1()) begin
          nd1[DLY_D1 +: 2] = 2'b11; to_d1++;
        end else begin
          nd2[DLY_D2 +: 2] = 2'b11; to_d2++;
        end
      end
      // one draw decides the dark counts of both detectors
      dark = $urandom % 1000000;
      if (dark < DARK_PPM) nd1[DLY_D1 +: 2] = 2'b11;
      else if (dark < 2 * DARK_PPM) nd2[DLY_D2 +: 2] = 2'b11;
      n_tg    += ntg[DLY_TG];
      n_d1    += nd1[DLY_D1];
      n_d2    += nd2[DLY_D2];
      n_tg_d1 += longint'(ntg[DLY_TG] & nd1[DLY_D1]);
      n_tg_d2 += longint'(ntg[DLY_TG] & nd2[DLY_D2]);
      n_d1_d2 += longint'(nd1[DLY_D1] & nd2[DLY_D2]);
    end
    sr_tg <= ntg; sr_d1 <= nd1; sr_d2 <= nd2;
    slot_cnt <= (slot_cnt == SLOT - 1) ? 0 : slot_cnt + 1;
  end
endmodule
