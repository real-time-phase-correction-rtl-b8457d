// tb_sweep_workload: the amplitude-sweep measurement run end to end on
// bppm_top at its default parameters.
//
// Channel A is held at a fixed amplitude while channels B, C and D are swept
// together from 0 dB down to -60 dB relative to A in 10 dB steps. The gain
// loop runs automatically; from the -10 dB step on, channel A alone is the
// strongest and the common gain stays put, so the weak channels are
// digitised far below full scale.
// The front-end model is the one of tb_bppm_top: every channel has its own
// gain-dependent delay (tens of degrees apart) and gain error, and the
// calibration memory holds their inverse. On top of that, a channel whose
// amplified signal lies below the calibration level A_CON gets an extra
// delay that no table entry covers (the amplitude dependence at a fixed
// gain): none down to -20 dB, 0.12 degree at -44 dB, 0.35 degree at -52 dB
// and 1.2 degree at -60 dB and below, linear in between (a model of this
// size is an own choice). Because the weak channels carry little weight in
// the sum, their extra delay should hardly show in the beam phase; each
// average must also agree within 3 output LSBs with the error that the extra
// delays alone would cause after an exact correction. At each step the design's 64k-
// sample average of the beam phase is taken from a block that lies entirely
// after the step and must be within 0.3 degree of the true beam phase (the
// precision the correction is meant to reach). For comparison the test also
// prints the phase error that summing the same signals without correction
// would give.
module tb_sweep_workload;
  import bppm_pkg::*;

  localparam real PI = 3.14159265358979;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic               adc_valid = 1'b0;
  adc_t               adc_ch [N_CH];
  adc_t               adc_mo = '0;
  logic               auto_gain = 1'b1;
  gain_t              manual_gain = '0;
  gain_t              gain;
  logic               gain_changed;
  logic               lut_wr_en = 1'b0;
  logic [LUT_AW-1:0]  lut_wr_addr = '0;
  lut_word_t          lut_wr_data = '0;
  logic               coef_valid;
  logic [15:0]        kx = 16'd10000, ky = 16'd10000;
  logic signed [23:0] x_offset = '0, y_offset = '0;
  logic               amp_valid;
  logic [COR_W:0]     amp [N_CH];
  logic               pos_valid;
  logic signed [23:0] x, y;
  logic               phase_valid;
  angle_t             phase_sum, beam_phase, beam_phase_avg;
  logic               avg_valid;

  bppm_top dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  int checks = 0, failures = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ain [N_CH];
  real phi_beam = 1.1;
  real phi_mo   = -0.4;
  real kgain;

  function automatic real delay_rad(input int c, input int g);
    real off [N_CH] = '{4.5, 126.0, -7.0, -9.5};
    real d;
    d = off[c] - 0.48 * g - 1.0 * (g / 8) + 0.3 * c * $sin(g / 5.0);
    return d * PI / 180.0;
  endfunction

  function automatic real gain_err(input int c, input int g);
    return 1.0 + 0.04 * $sin(c + g / 7.0);
  endfunction

  function automatic real wrap(input real a);
    return $atan2($sin(a), $cos(a));
  endfunction

  localparam real A_CON = 26000.0;   // level the table was calibrated at

  // extra delay of a channel whose amplified amplitude is a
  function automatic real level_delay_rad(input real a);
    real r, d;
    r = 20.0 * $log10(a / A_CON);
    if (r >= -20.0)      d = 0.0;
    else if (r >= -44.0) d = 0.12 * (-20.0 - r) / 24.0;
    else if (r >= -52.0) d = 0.12 + 0.23 * (-44.0 - r) / 8.0;
    else if (r >= -60.0) d = 0.35 + 0.85 * (-52.0 - r) / 8.0;
    else                 d = 1.2;
    return d * PI / 180.0;
  endfunction

  int n_samp = 0;
  always @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      real a, v;
      a = ain[c] * 10.0 ** (real'(gain) / 20.0) * gain_err(c, gain);
      v = a * $sin(PI / 2.0 * n_samp + phi_beam + delay_rad(c, gain) + level_delay_rad(a));
      if (v > 32767.0) v = 32767.0;
      if (v < -32767.0) v = -32767.0;
      adc_ch[c] <= adc_t'($rtoi(v + ((v >= 0.0) ? 0.5 : -0.5)));
    end
    adc_mo <= adc_t'($rtoi(20000.0 * $sin(PI / 2.0 * n_samp + phi_mo)));
    n_samp++;
  end

  task automatic load_lut();
    for (int c = 0; c < N_CH; c++)
      for (int g = 0; g < (1 << GAIN_W); g++) begin
        int  gg;
        real th, f;
        gg = (g > int'(GAIN_MAX)) ? int'(GAIN_MAX) : g;
        th = wrap(-delay_rad(c, gg));
        f  = 65536.0 / (kgain * gain_err(c, gg));
        @(posedge clk);
        lut_wr_en   <= 1'b1;
        lut_wr_addr <= {2'(c), 6'(g)};
        lut_wr_data <= '{phase: angle_t'($rtoi(th * 32768.0)), gain: gcoef_t'($rtoi(f + 0.5))};
      end
    @(posedge clk);
    lut_wr_en <= 1'b0;
  endtask

  // Phase error of the uncorrected sum at gain g, for comparison only.
  function automatic real uncorrected_error(input int g);
    real si = 0.0, sq = 0.0;
    for (int c = 0; c < N_CH; c++) begin
      real a;
      real dl;
      a = ain[c] * gain_err(c, g);
      dl = level_delay_rad(a * 10.0 ** (real'(g) / 20.0));
      si += a * $sin(phi_beam + delay_rad(c, g) + dl);
      sq += a * $cos(phi_beam + delay_rad(c, g) + dl);
    end
    return wrap($atan2(si, sq) - phi_beam);
  endfunction

  // Phase error left after an exact correction: only the extra delays of the
  // channels below A_CON remain, weighted by their amplitudes.
  function automatic real residual_error(input int g);
    real si = 0.0, sq = 0.0;
    for (int c = 0; c < N_CH; c++) begin
      real dl;
      dl = level_delay_rad(ain[c] * 10.0 ** (real'(g) / 20.0) * gain_err(c, g));
      si += ain[c] * $sin(phi_beam + dl);
      sq += ain[c] * $cos(phi_beam + dl);
    end
    return wrap($atan2(si, sq) - phi_beam);
  endfunction

  initial begin
    real max_err = 0.0;
    gain_t g_first;
    kgain = 1.0;
    for (int i = 0; i < 16; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    ain = '{800.0, 800.0, 800.0, 800.0};
    foreach (adc_ch[c]) adc_ch[c] = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    load_lut();
    wait (coef_valid);
    @(posedge clk);
    adc_valid <= 1'b1;
    // let the gain loop settle on channel A
    repeat (40 * (4096 + 20)) @(posedge clk);
    for (int s = 0; s <= 60; s += 10) begin
      real rel, d;
      rel = 10.0 ** (-real'(s) / 20.0);
      ain = '{800.0, 800.0 * rel, 800.0 * rel, 800.0 * rel};
      // the first average after the step mixes both settings; use the second
      @(posedge clk iff avg_valid);
      @(posedge clk iff avg_valid);
      d = real'(beam_phase_avg) / 32768.0 - wrap(phi_beam - phi_mo);
      d = wrap(d) * 180.0 / PI;
      if (d > max_err) max_err = d;
      if (-d > max_err) max_err = -d;
      checks++;
      if (d > 0.3 || d < -0.3) begin
        failures++;
        $display("B,C,D at -%0d dB: phase error %f deg", s, d);
      end
      // and it must be what the extra delays explain, within 3 output LSBs
      checks++;
      if (d - residual_error(gain) * 180.0 / PI > 0.0053 || residual_error(gain) * 180.0 / PI - d > 0.0053) begin
        failures++;
        $display("B,C,D at -%0d dB: error %f deg, the extra delays explain %f deg", s, d, residual_error(gain) * 180.0 / PI);
      end
      // from -10 dB on channel A alone is the strongest: the gain must hold
      if (s == 10) g_first = gain;
      if (s > 10) begin
        checks++;
        if (gain != g_first) begin
          failures++;
          $display("gain moved during the sweep (%0d -> %0d dB)", g_first, gain);
        end
      end
      $display("B,C,D at -%0d dB re A, gain %0d dB: corrected error %8.4f deg (extra delays: %7.4f), uncorrected sum %8.3f deg",
               s, gain, d, residual_error(gain) * 180.0 / PI, uncorrected_error(gain) * 180.0 / PI);
    end
    $display("largest corrected error %f deg", max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
