// tb_calibration_workload: the calibration procedure run through bppm_top at
// its default parameters, followed by a check of the table it produces.
//
// Calibration set-up: one source feeds all four pick-up inputs through a
// splitter and is synchronous with the MO. At each gain setting g (manual
// mode, 0..60 dB) the source level is set so that the amplified signal has
// its nominal amplitude A_CON. Each channel k is then measured alone: the
// words written for gain g give channel k an angle of 0 and a unity factor
// (2^16 / K) and give the other channels a factor of 0, so the summed signal
// is channel k by itself. The mean of 256 beam_phase results is then
// phase(source) - phase(MO) + delay_k(g); the mean of amp[k] is
// K * A_CON * gainerror_k(g). The reference values phase(source) - phase(MO)
// and A_CON stand for an independent instrument (a network analyser). From
// the measurements:
//   angle_k(g)  = -(measured phase - reference phase)
//   factor_k(g) = 2^16 * A_CON / (measured amplitude).
// The front-end model is the one of tb_bppm_top. The test requires every
// measured delay to be within 0.02 degree of the model and every gain error
// within 0.3 %. It then loads the table and, with the gain loop on
// automatic, checks the beam phase (within 0.3 degree) for beams of
// different strength and unequal channel amplitudes.
module tb_calibration_workload;
  import bppm_pkg::*;

  localparam real PI    = 3.14159265358979;
  localparam real A_CON = 26000.0;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic               adc_valid = 1'b0;
  adc_t               adc_ch [N_CH];
  adc_t               adc_mo = '0;
  logic               auto_gain = 1'b0;
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
  real phi_beam = 0.5;
  real phi_mo   = 2.0;
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

  int n_samp = 0;
  always @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      real a, v;
      a = ain[c] * 10.0 ** (real'(gain) / 20.0) * gain_err(c, gain);
      v = a * $sin(PI / 2.0 * n_samp + phi_beam + delay_rad(c, gain));
      if (v > 32767.0) v = 32767.0;
      if (v < -32767.0) v = -32767.0;
      adc_ch[c] <= adc_t'($rtoi(v + ((v >= 0.0) ? 0.5 : -0.5)));
    end
    adc_mo <= adc_t'($rtoi(20000.0 * $sin(PI / 2.0 * n_samp + phi_mo)));
    n_samp++;
  end

  task automatic write_word(input int c, input int g, input real angle, input real factor);
    @(posedge clk);
    lut_wr_en   <= 1'b1;
    lut_wr_addr <= {2'(c), 6'(g)};
    lut_wr_data <= '{phase: angle_t'($rtoi(angle * 32768.0 + ((angle >= 0.0) ? 0.5 : -0.5))),
                     gain: gcoef_t'($rtoi(factor + 0.5))};
    @(posedge clk);
    lut_wr_en   <= 1'b0;
  endtask

  // Mean of n results after the pipeline has settled.
  task automatic measure(input int k, input int n, output real ph, output real am);
    real s_ph = 0.0, s_am = 0.0, p0 = 0.0;
    int  got = 0;
    wait (coef_valid);
    repeat (100) @(posedge clk);
    while (got < n) begin
      @(posedge clk);
      if (phase_valid && amp_valid) begin
        real p;
        p = real'(beam_phase) / 32768.0;
        if (got == 0) p0 = p;
        s_ph += wrap(p - p0);
        s_am += real'(amp[k]);
        got++;
      end
    end
    ph = wrap(p0 + s_ph / n);
    am = s_am / n;
  endtask

  real cal_angle  [N_CH][61];
  real cal_factor [N_CH][61];

  initial begin
    real unity, ref_phase, worst_d = 0.0, worst_e = 0.0;
    kgain = 1.0;
    for (int i = 0; i < 16; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    unity = 65536.0 / kgain;
    ref_phase = wrap(phi_beam - phi_mo);
    foreach (adc_ch[c]) adc_ch[c] = '0;
    ain = '{0.0, 0.0, 0.0, 0.0};
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    adc_valid <= 1'b1;

    // ---------------- calibration ----------------
    for (int g = 0; g <= int'(GAIN_MAX); g++) begin
      real lvl;
      manual_gain <= 6'(g);
      lvl = A_CON / 10.0 ** (real'(g) / 20.0);
      ain = '{lvl, lvl, lvl, lvl};
      for (int k = 0; k < N_CH; k++) begin
        real ph, am, d_meas, e_meas, dd, de;
        for (int c = 0; c < N_CH; c++) write_word(c, g, 0.0, (c == k) ? unity : 0.0);
        measure(k, 256, ph, am);
        d_meas = wrap(ph - ref_phase);
        e_meas = am / (kgain * A_CON);
        cal_angle[k][g]  = wrap(-d_meas);
        cal_factor[k][g] = 65536.0 * A_CON / am;
        dd = wrap(d_meas - delay_rad(k, g)) * 180.0 / PI;
        de = (e_meas / gain_err(k, g) - 1.0) * 100.0;
        if (dd > worst_d) worst_d = dd;
        if (-dd > worst_d) worst_d = -dd;
        if (de > worst_e) worst_e = de;
        if (-de > worst_e) worst_e = -de;
        checks++;
        if (dd > 0.02 || dd < -0.02 || de > 0.3 || de < -0.3) begin
          failures++;
          if (failures < 10)
            $display("channel %0d at %0d dB: delay off by %f deg, gain error off by %f %%", k, g, dd, de);
        end
      end
    end
    $display("calibration: 244 points, worst delay error %f deg, worst gain error %f %%", worst_d, worst_e);

    // ---------------- load the table ----------------
    for (int k = 0; k < N_CH; k++)
      for (int g = 0; g < (1 << GAIN_W); g++) begin
        int gg;
        gg = (g > int'(GAIN_MAX)) ? int'(GAIN_MAX) : g;
        write_word(k, g, cal_angle[k][gg], cal_factor[k][gg]);
      end

    // ---------------- use it ----------------
    auto_gain <= 1'b1;
    phi_beam = -1.3;
    for (int level = 0; level < 4; level++) begin
      real base, ph, am, err;
      base = 20000.0 / 10.0 ** (real'(level) * 14.0 / 20.0);  // 0, -14, -28, -42 dB
      ain = '{base * 0.9, base * 0.35, base * 0.6, base * 0.2};
      repeat (60 * (4096 + 20)) @(posedge clk);   // let the gain settle
      measure(0, 1024, ph, am);
      err = wrap(ph - wrap(phi_beam - phi_mo)) * 180.0 / PI;
      $display("beam at -%0d dB: gain %0d dB, beam phase error %f deg", level * 14, gain, err);
      checks++;
      if (err > 0.3 || err < -0.3) begin
        failures++;
        $display("beam phase error %f deg exceeds 0.3 deg", err);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
