// tb_channel_correction: self-checking test of channel_correction.
// Random samples, angles and gain factors are streamed one per clock. Each
// output must match the floating-point model
//   (I', Q') = K * rotate((I, Q), theta) * g / 2^16
// within 5 LSB, and must leave exactly 25 clocks (500 ns at 50 MHz) after
// its input.
module tb_channel_correction;
  import bppm_pkg::*;

  localparam int unsigned ITER = 16;
  localparam int unsigned LAT  = 25;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    in_valid = 1'b0;
  iq_adc_t in_iq = '0;
  angle_t  theta = '0;
  gcoef_t  gain = '0;
  logic    out_valid;
  iq_cor_t out_iq;
  int      checks = 0, failures = 0;

  channel_correction dut (.*);

  always #10 clk = ~clk;   // 50 MHz

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real rabs(input real a);
    return (a < 0.0) ? -a : a;
  endfunction

  real    kgain;
  real    exp_i [$], exp_q [$];
  int     cyc = 0, first_in = -1, first_out = -1;
  realtime t_in, t_out;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    kgain = 1.0;
    for (int i = 0; i < ITER; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      int  vi, vq, t, g;
      real th, sc;
      vi = $urandom_range(0, 65534) - 32767;
      vq = $urandom_range(0, 65534) - 32767;
      t  = $urandom_range(0, 2 * PI_Q) - PI_Q;
      g  = $urandom_range(20000, 60000);
      th = real'(t) / 32768.0;
      sc = kgain * real'(g) / 65536.0;
      in_iq.i  <= adc_t'(vi);
      in_iq.q  <= adc_t'(vq);
      theta    <= angle_t'(t);
      gain     <= gcoef_t'(g);
      in_valid <= 1'b1;
      exp_q.push_back(sc * (vq * $cos(th) - vi * $sin(th)));
      exp_i.push_back(sc * (vq * $sin(th) + vi * $cos(th)));
      if (first_in < 0) begin
        first_in = cyc;
        t_in = $realtime;
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (first_out - first_in - 1 != LAT || exp_i.size() != 0) begin
      failures++;
      $display("latency %0d clocks (expected %0d), %0d outputs missing",
               first_out - first_in - 1, LAT, exp_i.size());
    end
    $display("latency %0d clocks = %0t ns", first_out - first_in - 1, (t_out - t_in - 20.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ei, eq;
      if (first_out < 0) begin
        first_out = cyc;
        t_out = $realtime;
      end
      ei = exp_i.pop_front();
      eq = exp_q.pop_front();
      checks++;
      if (rabs(real'(out_iq.i) - ei) > 5.0 || rabs(real'(out_iq.q) - eq) > 5.0) begin
        failures++;
        if (failures < 10)
          $display("mismatch: got (I %0d, Q %0d) want (I %f, Q %f)", out_iq.i, out_iq.q, ei, eq);
      end
    end
  end

endmodule
