// bppm_top: position and phase calculation with real-time phase correction
// for a four-pick-up beam position monitor (BPM).
//
// Each pick-up signal (A right, B left, C top, D bottom) and the master-
// oscillator (MO) reference arrive as 16-bit samples of a 162.5 MHz carrier
// under-sampled at 50 MHz. The analog front end gives each channel a gain-
// dependent delay and gain error; instead of correcting the phase of the
// summed signal (which would need a table indexed by all gains and phases),
// every channel is corrected before the sum:
//   iq_demod (x5)            ADC stream -> (I, Q) pairs
//   gain_control             one common gain setting for the four channels
//   correction_lut           per-channel angle and gain factor at that gain
//   channel_correction (x4)  IQ rotation by the angle, then scaling
//   sum_signal               digital sum of the corrected channels
//   phase_calc (x2)          phase of the sum and of the MO reference
//   beam_phase               phase of the sum minus MO phase
//   phase_averager           mean of 64k beam-phase results
//   amplitude_calc (x2)      amplitudes of A,B and of C,D
//   position_calc (x2)       X and Y by difference over sum
// The structure follows the design. The per-channel amplitudes are brought
// out as well (own choice): with the gain factors of the other channels set
// to zero, amp and beam_phase measure one channel at a time, which is one
// way to fill the calibration memory. The MO path is not corrected (it has a
// fixed gain and delay); its IQ stream is delayed so that each beam-phase
// result compares samples taken at the same instant (own choice).
//
// Timing at the 50 MHz sample clock, counted from an ADC sample at the
// inputs: corrected channels after 1 + 25 clocks, amp after 44, phase_sum
// after 46, beam_phase after 47, X and Y after 64. One result of each per clock.
// After a gain change (gain_changed pulse) results for about 70 clocks mix
// samples and coefficients of the two settings and should be discarded.
// The calibration memory must be loaded before use; coef_valid shows that
// the coefficients in use belong to the current gain.
module bppm_top
  import bppm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // ADC samples
  input  logic               adc_valid,
  input  adc_t               adc_ch [N_CH],
  input  adc_t               adc_mo,
  // gain setting
  input  logic               auto_gain,
  input  gain_t              manual_gain,
  output gain_t              gain,
  output logic               gain_changed,
  // calibration memory loading
  input  logic               lut_wr_en,
  input  logic [LUT_AW-1:0]  lut_wr_addr,
  input  lut_word_t          lut_wr_data,
  output logic               coef_valid,
  // position set-up
  input  logic [15:0]        kx,
  input  logic [15:0]        ky,
  input  logic signed [23:0] x_offset,
  input  logic signed [23:0] y_offset,
  // results
  output logic               amp_valid,
  output logic [COR_W:0]     amp [N_CH],     // corrected amplitudes A..D, times K
  output logic               pos_valid,
  output logic signed [23:0] x,
  output logic signed [23:0] y,
  output logic               phase_valid,
  output angle_t             phase_sum,
  output angle_t             beam_phase,
  output logic               avg_valid,
  output angle_t             beam_phase_avg
);

  localparam int unsigned ITER     = 16;
  localparam int unsigned COR_LAT  = 25;     // 500 ns at 50 MHz
  localparam int unsigned MO_DELAY = COR_LAT + 1;

  // ---------------- IQ recovery ----------------
  logic    dm_valid [N_CH];
  iq_adc_t dm_iq    [N_CH];
  logic    mo_dm_valid;
  iq_adc_t mo_dm_iq;

  for (genvar c = 0; c < N_CH; c++) begin : g_demod
    iq_demod u_demod (
      .clk, .rst_n, .in_valid(adc_valid), .adc(adc_ch[c]),
      .out_valid(dm_valid[c]), .out(dm_iq[c])
    );
  end

  iq_demod u_demod_mo (
    .clk, .rst_n, .in_valid(adc_valid), .adc(adc_mo),
    .out_valid(mo_dm_valid), .out(mo_dm_iq)
  );

  // ---------------- gain setting and calibration ----------------
  angle_t phase_coef [N_CH];
  gcoef_t gain_coef  [N_CH];

  gain_control u_gain (
    .clk, .rst_n, .in_valid(dm_valid[0]), .iq(dm_iq),
    .auto_mode(auto_gain), .manual_gain, .gain, .gain_changed
  );

  correction_lut u_lut (
    .clk, .rst_n, .gain,
    .wr_en(lut_wr_en), .wr_addr(lut_wr_addr), .wr_data(lut_wr_data),
    .phase_coef, .gain_coef, .coef_valid
  );

  // ---------------- per-channel correction ----------------
  logic    cc_valid [N_CH];
  iq_cor_t cc_iq    [N_CH];

  for (genvar c = 0; c < N_CH; c++) begin : g_corr
    channel_correction #(.ITER(ITER), .LATENCY(COR_LAT)) u_corr (
      .clk, .rst_n, .in_valid(dm_valid[c]), .in_iq(dm_iq[c]),
      .theta(phase_coef[c]), .gain(gain_coef[c]),
      .out_valid(cc_valid[c]), .out_iq(cc_iq[c])
    );
  end

  // ---------------- summed signal and beam phase ----------------
  logic                    sum_valid;
  logic signed [COR_W+1:0] sum_i, sum_q;

  sum_signal u_sum (
    .clk, .rst_n, .in_valid(cc_valid[0]), .in_iq(cc_iq),
    .out_valid(sum_valid), .out_i(sum_i), .out_q(sum_q)
  );

  logic ps_valid;
  phase_calc #(.IN_W(COR_W + 2), .ITER(ITER)) u_phase_sum (
    .clk, .rst_n, .in_valid(sum_valid), .in_i(sum_i), .in_q(sum_q),
    .out_valid(ps_valid), .phase(phase_sum)
  );

  // MO reference: delayed to line up with the summed signal.
  iq_adc_t          mo_d   [MO_DELAY];
  logic [MO_DELAY-1:0] mo_dv;
  always_ff @(posedge clk) begin
    mo_d[0] <= mo_dm_iq;
    for (int k = 1; k < MO_DELAY; k++) mo_d[k] <= mo_d[k-1];
  end
  always_ff @(posedge clk) begin
    if (!rst_n) mo_dv <= '0;
    else        mo_dv <= MO_DELAY'({mo_dv, mo_dm_valid});
  end

  logic   pm_valid;
  angle_t phase_mo;
  phase_calc #(.IN_W(ADC_W), .ITER(ITER)) u_phase_mo (
    .clk, .rst_n, .in_valid(mo_dv[MO_DELAY-1]),
    .in_i(mo_d[MO_DELAY-1].i), .in_q(mo_d[MO_DELAY-1].q),
    .out_valid(pm_valid), .phase(phase_mo)
  );

  beam_phase u_beam_phase (
    .clk, .rst_n, .in_valid(ps_valid && pm_valid),
    .phase_sum, .phase_mo,
    .out_valid(phase_valid), .phase(beam_phase)
  );

  phase_averager #(.LOG2N(16)) u_avg (
    .clk, .rst_n, .in_valid(phase_valid), .phase(beam_phase),
    .out_valid(avg_valid), .mean(beam_phase_avg)
  );

  // ---------------- amplitudes and position ----------------
  logic         ax_valid, ay_valid;
  logic [COR_W:0] amp_x [2];
  logic [COR_W:0] amp_y [2];

  amplitude_calc #(.ITER(ITER)) u_amp_x (
    .clk, .rst_n, .in_valid(cc_valid[0]), .in_iq('{cc_iq[0], cc_iq[1]}),
    .out_valid(ax_valid), .amp(amp_x)
  );

  amplitude_calc #(.ITER(ITER)) u_amp_y (
    .clk, .rst_n, .in_valid(cc_valid[2]), .in_iq('{cc_iq[2], cc_iq[3]}),
    .out_valid(ay_valid), .amp(amp_y)
  );

  assign amp_valid = ax_valid && ay_valid;
  assign amp       = '{amp_x[0], amp_x[1], amp_y[0], amp_y[1]};

  logic xv, yv;
  position_calc #(.AMP_W(COR_W + 1)) u_pos_x (
    .clk, .rst_n, .in_valid(ax_valid), .amp_a(amp_x[0]), .amp_b(amp_x[1]),
    .k(kx), .offset(x_offset), .out_valid(xv), .pos(x)
  );

  position_calc #(.AMP_W(COR_W + 1)) u_pos_y (
    .clk, .rst_n, .in_valid(ay_valid), .amp_a(amp_y[0]), .amp_b(amp_y[1]),
    .k(ky), .offset(y_offset), .out_valid(yv), .pos(y)
  );

  assign pos_valid = xv && yv;

endmodule
