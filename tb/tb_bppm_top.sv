// tb_bppm_top: end-to-end test of bppm_top at its default parameters.
//
// A model of the analog front end drives the five ADC inputs. Pick-up k
// carries the beam signal with input amplitude ain[k]; the common gain
// setting g (taken from the design's own gain output) multiplies it by
// 10^(g/20) times a per-channel gain error, and the channel adds a
// gain-dependent delay, falling by roughly 0.5 degree per dB with 1 degree
// steps every 8 dB, on top of a fixed per-channel offset (channel B's is
// made large, beyond 90 degrees, to exercise the quarter-turn stage). The
// MO reference has a fixed phase. Samples follow y[n] = A sin(pi/2 n + phi),
// clipped to 16 bits. Results are not checked within 200 clocks of a clipped
// sample (the automatic gain is then still coming down).
//
// The calibration memory is loaded with the exact inverse of the model
// (angle = -delay, factor = 2^16 / (K * gain error)) for all 256 words. The
// test then checks that, whatever the gain:
//   * beam_phase equals the beam phase minus the MO phase (wrapped), within
//     0.05 degree, although the channel delays differ by tens of degrees;
//   * X and Y equal K (Va - Vb)/(Va + Vb) - offset of the input amplitudes;
//   * amp[k] equals the CORDIC gain times the amplified input amplitude of
//     pick-up k with its gain error removed (0.1 % + 8 LSB);
//   * the 64k-sample average equals the beam phase;
// and that each mechanism happens: manual gain, a switch to automatic gain,
// automatic gain steps up and down, reloads of the coefficients after a gain
// change, a quarter-turn pre-rotation, a phase difference wrapping through
// +-pi, and an averaged output.
module tb_bppm_top;
  import bppm_pkg::*;

  localparam real PI = 3.14159265358979;

  logic               clk = 1'b0, rst_n = 1'b0;
  logic               adc_valid = 1'b0;
  adc_t               adc_ch [N_CH];
  adc_t               adc_mo = '0;
  logic               auto_gain = 1'b0;
  gain_t              manual_gain = 6'd30;
  gain_t              gain;
  logic               gain_changed;
  logic               lut_wr_en = 1'b0;
  logic [LUT_AW-1:0]  lut_wr_addr = '0;
  lut_word_t          lut_wr_data = '0;
  logic               coef_valid;
  logic [15:0]        kx = 16'd12000, ky = 16'd9000;
  logic signed [23:0] x_offset = 24'sd150, y_offset = -24'sd80;
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
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- front-end model ----------------
  real ain [N_CH];            // input amplitudes (ADC units at 0 dB)
  real phi_beam = 0.7;        // beam phase, rad
  real phi_mo   = 0.3;        // MO phase, rad
  real kgain;                 // CORDIC gain for 16 stages

  function automatic real delay_rad(input int c, input int g);
    real off [N_CH] = '{4.5, 126.0, -7.0, -9.5};  // degrees at 0 dB
    real d;
    d = off[c] - 0.48 * g - 1.0 * (g / 8) + 0.3 * c * $sin(g / 5.0);
    return d * PI / 180.0;
  endfunction

  function automatic real gain_err(input int c, input int g);
    return 1.0 + 0.04 * $sin(c + g / 7.0);
  endfunction

  int n_samp = 0;             // free-running sample index
  int since_clip = 0;         // clocks since a sample was last clipped
  always @(posedge clk) begin
    since_clip <= since_clip + 1;
    for (int c = 0; c < N_CH; c++) begin
      real a, v;
      a = ain[c] * 10.0 ** (real'(gain) / 20.0) * gain_err(c, gain);
      v = a * $sin(PI / 2.0 * n_samp + phi_beam + delay_rad(c, gain));
      if (v > 32767.0 || v < -32767.0) since_clip <= 0;
      if (v > 32767.0) v = 32767.0;
      if (v < -32767.0) v = -32767.0;
      adc_ch[c] <= adc_t'($rtoi(v + ((v >= 0.0) ? 0.5 : -0.5)));
    end
    adc_mo <= adc_t'($rtoi(20000.0 * $sin(PI / 2.0 * n_samp + phi_mo)));
    n_samp++;
  end

  // ---------------- result checking ----------------
  int    settle = 0;          // checks resume this many clocks after a change
  int    n_phase = 0, n_pos = 0, n_amp = 0, n_avg = 0, n_avg_checked = 0;
  int    n_auto_steps_up = 0, n_auto_steps_down = 0, n_manual = 0, n_switch = 0;
  int    n_reload = 0, n_prerot = 0, n_wrap = 0;
  logic  coef_valid_q = 1'b0;
  real   exp_phase;
  real   exp_x, exp_y;
  gain_t gain_q = '0;

  function automatic real wrap(input real a);
    return $atan2($sin(a), $cos(a));
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      exp_phase = wrap(phi_beam - phi_mo);
      exp_x = real'(kx) * (ain[0] - ain[1]) / (ain[0] + ain[1]) - real'(x_offset);
      exp_y = real'(ky) * (ain[2] - ain[3]) / (ain[2] + ain[3]) - real'(y_offset);
      // mechanisms
      coef_valid_q <= coef_valid;
      if (coef_valid_q && !coef_valid) n_reload++;
      gain_q <= gain;
      if (gain != gain_q) begin
        settle = 150;
        if (auto_gain && gain > gain_q) n_auto_steps_up++;
        if (auto_gain && gain < gain_q) n_auto_steps_down++;
      end
      if (dut.u_lut.phase_coef[1] > angle_t'(51472) || dut.u_lut.phase_coef[1] < -angle_t'(51472))
        if (dut.g_corr[1].u_corr.u_rot.in_valid) n_prerot++;
      if (settle > 0) settle--;
      else if (phase_valid && coef_valid && since_clip > 200) begin
        real d;
        n_phase++;
        if (int'(phase_sum) - int'(dut.phase_mo) > PI_Q || int'(phase_sum) - int'(dut.phase_mo) < -PI_Q) n_wrap++;
        d = real'(beam_phase) / 32768.0 - exp_phase;
        if (d > PI) d -= 2.0 * PI;
        if (d < -PI) d += 2.0 * PI;
        checks++;
        if (d * 180.0 / PI > 0.05 || d * 180.0 / PI < -0.05) begin
          failures++;
          if (failures < 10)
            $display("beam phase %f deg, expected %f deg (gain %0d)",
                     real'(beam_phase) / 32768.0 * 180.0 / PI, exp_phase * 180.0 / PI, gain);
        end
      end
      if (settle == 0 && pos_valid && coef_valid && since_clip > 200) begin
        n_pos++;
        checks++;
        if (real'(x) - exp_x > 10.0 || exp_x - real'(x) > 10.0 ||
            real'(y) - exp_y > 10.0 || exp_y - real'(y) > 10.0) begin
          failures++;
          if (failures < 10) $display("position (%0d,%0d), expected (%f,%f)", x, y, exp_x, exp_y);
        end
      end
      if (settle == 0 && amp_valid && coef_valid && since_clip > 200) begin
        n_amp++;
        for (int c = 0; c < N_CH; c++) begin
          real ea;
          ea = kgain * ain[c] * 10.0 ** (real'(gain) / 20.0);
          checks++;
          if (real'(amp[c]) - ea > 8.0 + 0.001 * ea || ea - real'(amp[c]) > 8.0 + 0.001 * ea) begin
            failures++;
            if (failures < 10) $display("amp[%0d] = %0d, expected %f (gain %0d)", c, amp[c], ea, gain);
          end
        end
      end
    end
  end

  // ---------------- stimulus ----------------
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

  task automatic run_and_count(input int cycles, input string what);
    int p0;
    p0 = n_phase;
    repeat (cycles) @(posedge clk);
    checks++;
    if (n_phase - p0 < cycles / 4) begin
      failures++;
      $display("%s: only %0d phase results checked", what, n_phase - p0);
    end
  endtask

  // Gain the loop settles at (thresholds of gain_control, 29205 and 23197):
  // rising, the lowest setting whose strongest channel reaches LOW; falling,
  // the highest setting whose strongest channel stays at or below HIGH.
  function automatic real amax(input int g);
    real m = 0.0;
    for (int c = 0; c < N_CH; c++) begin
      real a;
      a = ain[c] * 10.0 ** (real'(g) / 20.0) * gain_err(c, g);
      if (a > m) m = a;
    end
    return m;
  endfunction
  function automatic int predict_up(input int from);
    for (int g = from; g <= int'(GAIN_MAX); g++) if (amax(g) >= 23197.0) return g;
    return GAIN_MAX;
  endfunction
  function automatic int predict_down(input int from);
    for (int g = from; g >= 0; g--) if (amax(g) <= 29205.0) return g;
    return 0;
  endfunction

  int want;

  initial begin
    kgain = 1.0;
    for (int i = 0; i < 16; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    ain = '{300.0, 150.0, 200.0, 250.0};
    foreach (adc_ch[c]) adc_ch[c] = '0;
    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    load_lut();
    wait (coef_valid);
    @(posedge clk);
    adc_valid <= 1'b1;

    // 1: manual gain 30 dB
    n_manual++;
    run_and_count(2000, "manual 30 dB");
    // 2: another beam phase and another manual gain
    phi_beam = -2.0;          // beam - MO = -2.3 rad
    settle = 150;
    manual_gain <= 6'd12;
    run_and_count(2000, "manual 12 dB");
    n_manual++;
    // 3: automatic gain: climbs from 12 dB towards 38 dB
    auto_gain <= 1'b1;
    n_switch++;
    repeat (30 * (4096 + 20)) @(posedge clk);
    want = predict_up(12);
    checks++;
    if (int'(gain) != want) begin
      failures++;
      $display("automatic gain settled at %0d dB, expected %0d dB", gain, want);
    end
    phi_beam = 2.9;
    phi_mo   = -1.2;          // beam - MO = 4.1 rad, wraps to -2.18 rad
    settle = 150;
    run_and_count(5000, "auto 38 dB");
    // 4: beam 6 dB stronger: the gain steps down
    ain = '{600.0, 300.0, 400.0, 500.0};
    settle = 150;
    want = predict_down(int'(gain));
    repeat (10 * (4096 + 20)) @(posedge clk);
    checks++;
    if (int'(gain) != want) begin
      failures++;
      $display("automatic gain settled at %0d dB, expected %0d dB", gain, want);
    end
    // 5: run through two whole averaging blocks, the second one steady
    begin
      int a0;
      a0 = n_avg;
      while (n_avg < a0 + 2) @(posedge clk);
    end

    // mechanisms
    checks += 8;
    if (n_manual == 0)          begin failures++; $display("manual gain never used"); end
    if (n_switch == 0)          begin failures++; $display("no manual-to-auto switch"); end
    if (n_auto_steps_up == 0)   begin failures++; $display("no automatic gain step up"); end
    if (n_auto_steps_down == 0) begin failures++; $display("no automatic gain step down"); end
    if (n_reload == 0)          begin failures++; $display("coefficients never reloaded"); end
    if (n_prerot == 0)          begin failures++; $display("no quarter-turn pre-rotation"); end
    if (n_wrap == 0)            begin failures++; $display("phase difference never wrapped"); end
    if (n_avg_checked == 0)     begin failures++; $display("no steady average checked"); end
    if (n_amp == 0)             begin failures++; $display("no amplitude checked"); end
    $display("phase checks %0d, position checks %0d, amplitude checks %0d, averages %0d (%0d checked)", n_phase, n_pos, n_amp, n_avg, n_avg_checked);
    $display("gain steps up %0d down %0d, reloads %0d, pre-rotated samples %0d, wraps %0d",
             n_auto_steps_up, n_auto_steps_down, n_reload, n_prerot, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Averages: the last block is entirely at a steady beam and gain.
  int last_change = 0, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gain != gain_q || !coef_valid) last_change <= cyc;
    if (rst_n && avg_valid) begin
      n_avg++;
      if (cyc - last_change > 65536 + 200) begin
        real d;
        d = real'(beam_phase_avg) / 32768.0 - exp_phase;
        checks++;
        n_avg_checked++;
        if (d * 180.0 / PI > 0.05 || d * 180.0 / PI < -0.05) begin
          failures++;
          $display("average %f deg, expected %f deg", real'(beam_phase_avg) / 32768.0 * 180.0 / PI,
                   exp_phase * 180.0 / PI);
        end
      end
    end
  end

endmodule
