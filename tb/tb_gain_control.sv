// tb_gain_control: self-checking test of gain_control with a model of the
// front end.
// The model gives each channel an input amplitude; the amplitude reaching
// the ADC is that times 10^(gain/20), clipped at full scale, and the IQ
// pairs fed to the block carry a slowly turning phase. For each scenario the
// settled gain is predicted from the thresholds alone: rising from below,
// the loop stops at the lowest gain whose strongest channel reaches LOW;
// falling from above, at the highest gain whose strongest channel stays at
// or below HIGH. Clamping at 0 and GAIN_MAX dB, manual mode (including a
// request above GAIN_MAX), and one gain_changed pulse per change are checked.
module tb_gain_control;
  import bppm_pkg::*;

  localparam int unsigned WINDOW = 64;
  localparam int unsigned HIGH   = 29205;
  localparam int unsigned LOW    = 23197;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    in_valid = 1'b0;
  iq_adc_t iq [N_CH];
  logic    auto_mode = 1'b1;
  gain_t   manual_gain = '0;
  gain_t   gain;
  logic    gain_changed;
  int      checks = 0, failures = 0;

  gain_control #(.WINDOW(WINDOW), .HIGH(HIGH), .LOW(LOW)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real ain [N_CH];     // input amplitudes, ADC units at 0 dB gain
  real ph = 0.0;

  // Front-end model: drive one IQ pair per clock at the current gain.
  always @(posedge clk) begin
    for (int c = 0; c < N_CH; c++) begin
      real a, vi, vq;
      a  = ain[c] * 10.0 ** (real'(gain) / 20.0);
      vi = a * $sin(ph + c);
      vq = a * $cos(ph + c);
      if (vi > 32767.0) vi = 32767.0;
      if (vi < -32767.0) vi = -32767.0;
      if (vq > 32767.0) vq = 32767.0;
      if (vq < -32767.0) vq = -32767.0;
      iq[c].i <= adc_t'($rtoi(vi));
      iq[c].q <= adc_t'($rtoi(vq));
    end
    ph = ph + 0.3;
  end

  // Count changes and pulses.
  gain_t gain_prev = '0;
  int    n_changes = 0, n_pulses = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (gain != gain_prev) n_changes++;
      if (gain_changed) n_pulses++;
      gain_prev <= gain;
    end
  end

  function automatic real amax(input int g);
    real m = 0.0;
    for (int c = 0; c < N_CH; c++) if (ain[c] * 10.0 ** (real'(g) / 20.0) > m) m = ain[c] * 10.0 ** (real'(g) / 20.0);
    return m;
  endfunction

  // Peak seen by the block: amplitude after truncation to integers, at most
  // full scale; the checker allows 0.2% for that.
  function automatic int predict_up();
    for (int g = 0; g <= int'(GAIN_MAX); g++) if (amax(g) >= real'(LOW)) return g;
    return GAIN_MAX;
  endfunction
  function automatic int predict_down();
    for (int g = GAIN_MAX; g >= 0; g--) if (amax(g) <= real'(HIGH)) return g;
    return 0;
  endfunction

  task automatic settle_and_check(input int want, input string what);
    repeat (70 * (WINDOW + 16 + 4)) @(posedge clk);
    checks++;
    if (int'(gain) != want) begin
      failures++;
      $display("%s: gain %0d dB, expected %0d dB", what, gain, want);
    end
    // must now be stable
    begin
      gain_t g0 = gain;
      repeat (4 * WINDOW) @(posedge clk);
      checks++;
      if (gain != g0) begin
        failures++;
        $display("%s: gain still moving", what);
      end
    end
  endtask

  initial begin
    ain = '{100.0, 220.0, 50.0, 10.0};
    foreach (iq[c]) iq[c] = '0;
    in_valid = 1'b1;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    checks++;
    if (gain != '0) begin failures++; $display("reset gain not 0"); end

    // 1: weak beam, gain climbs from 0 dB
    settle_and_check(predict_up(), "rising");
    // 2: beam 20 dB stronger, gain falls
    ain = '{1000.0, 2200.0, 500.0, 100.0};
    settle_and_check(predict_down(), "falling");
    // 3: very weak beam: clamp at the top
    ain = '{1.0, 2.0, 1.0, 1.0};
    settle_and_check(GAIN_MAX, "clamp high");
    // 4: very strong beam: clamp at 0 dB
    ain = '{40000.0, 40000.0, 40000.0, 40000.0};
    settle_and_check(0, "clamp low");
    // 5: manual mode
    auto_mode <= 1'b0;
    manual_gain <= 6'd17;
    repeat (3) @(posedge clk);
    checks++;
    if (gain != 6'd17) begin failures++; $display("manual: gain %0d", gain); end
    manual_gain <= 6'd63;
    repeat (3) @(posedge clk);
    checks++;
    if (gain != gain_t'(GAIN_MAX)) begin failures++; $display("manual clamp: gain %0d", gain); end
    // 6: back to automatic with a mid-range beam
    ain = '{300.0, 100.0, 80.0, 90.0};
    auto_mode <= 1'b1;
    settle_and_check(predict_down(), "auto after manual");

    checks++;
    if (n_changes != n_pulses || n_changes < 20) begin
      failures++;
      $display("%0d changes but %0d gain_changed pulses", n_changes, n_pulses);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
