// gain_control: chooses the single gain setting shared by the four channels.
//
// All four channels always run at the same gain, chosen so that the
// strongest of the four amplified signals sits close to the ADC full scale.
// This block watches the demodulated (I, Q) pairs of the four channels, whose
// squared length I^2 + Q^2 is the squared signal amplitude whatever the
// sampling phase (a raw sample, by contrast, can be up to 3 dB below the
// peak). Over each window of WINDOW valid pairs it finds the largest squared
// amplitude of the four channels and compares it with HIGH^2 and LOW^2; at the
// end of
// the window the gain is lowered 1 dB if that peak exceeded HIGH, raised
// 1 dB if it stayed below LOW, and otherwise kept, within 0..GAIN_MAX dB.
// HIGH and LOW are about 2 dB apart, more than one step, so the loop settles.
// After every change the next SETTLE pairs are ignored, so that a window
// only measures samples taken at the new setting (the attenuators need time
// to settle and a few samples at the old gain are still in flight).
// In manual mode (auto_mode = 0) the setting is taken from manual_gain,
// clamped to GAIN_MAX. The common gain and the peak-to-full-scale rule
// follow the design; the window, thresholds, 1 dB stepping and the manual
// mode are this implementation's choice. The setting goes both to the
// front-end attenuators and to the calibration memory as its index. The
// settling blank is also this implementation's choice.
//
// Interface: iq[N_CH]/in_valid, auto_mode, manual_gain in; gain and a
// one-clock gain_changed pulse out. Timing: an automatic step happens at
// most once per SETTLE + WINDOW pairs, 2 clocks after the window's last pair; manual changes take effect after 1 clock.
// Reset value: 0 dB.
module gain_control
  import bppm_pkg::*;
#(
  parameter int unsigned WINDOW = 4096,
  parameter int unsigned HIGH   = 29205,  // about 0.89 of full scale
  parameter int unsigned LOW    = 23197,  // about 0.71 of full scale
  parameter int unsigned SETTLE = 16      // pairs ignored after a change
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  iq_adc_t iq [N_CH],
  input  logic   auto_mode,
  input  gain_t  manual_gain,
  output gain_t  gain,
  output logic   gain_changed
);

  localparam int unsigned CW = $clog2(WINDOW);
  localparam int unsigned PW = 2 * ADC_W;          // squared amplitude width
  localparam logic [PW-1:0] HIGH_SQ = PW'(HIGH * HIGH);
  localparam logic [PW-1:0] LOW_SQ  = PW'(LOW * LOW);

  localparam int unsigned SW = $clog2(SETTLE + 1);

  logic [CW-1:0] cnt;
  logic [PW-1:0] peak;
  logic [SW-1:0] blank;

  // Squared amplitude of each channel, registered, and the largest of them.
  logic [PW-1:0] amp_sq [N_CH];
  logic          sq_valid;
  always_ff @(posedge clk) begin
    for (int c = 0; c < N_CH; c++)
      amp_sq[c] <= PW'(32'(iq[c].i * iq[c].i)) + PW'(32'(iq[c].q * iq[c].q));
  end
  always_ff @(posedge clk) begin
    if (!rst_n) sq_valid <= 1'b0;
    else        sq_valid <= in_valid;
  end

  logic [PW-1:0] cur_max;
  always_comb begin
    cur_max = '0;
    for (int c = 0; c < N_CH; c++)
      if (amp_sq[c] > cur_max) cur_max = amp_sq[c];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt          <= '0;
      peak         <= '0;
      blank        <= SW'(SETTLE);
      gain         <= '0;
      gain_changed <= 1'b0;
    end else begin
      gain_changed <= 1'b0;
      if (!auto_mode) begin
        gain_t g;
        g = (manual_gain > gain_t'(GAIN_MAX)) ? gain_t'(GAIN_MAX) : manual_gain;
        gain         <= g;
        gain_changed <= (g != gain);
        cnt          <= '0;
        peak         <= '0;
        blank        <= SW'(SETTLE);
      end else if (sq_valid && blank != '0) begin
        blank <= blank - 1'b1;
      end else if (sq_valid) begin
        logic [PW-1:0] pk;
        pk = (cur_max > peak) ? cur_max : peak;
        if (cnt == CW'(WINDOW - 1)) begin
          cnt  <= '0;
          peak <= '0;
          if (pk > HIGH_SQ && gain != '0) begin
            gain         <= gain - 1'b1;
            gain_changed <= 1'b1;
            blank        <= SW'(SETTLE);
          end else if (pk < LOW_SQ && gain < gain_t'(GAIN_MAX)) begin
            gain         <= gain + 1'b1;
            gain_changed <= 1'b1;
            blank        <= SW'(SETTLE);
          end
        end else begin
          cnt  <= cnt + 1'b1;
          peak <= pk;
        end
      end
    end
  end

endmodule
