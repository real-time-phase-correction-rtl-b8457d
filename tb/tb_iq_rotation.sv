// tb_iq_rotation: self-checking test of iq_rotation.
// Random (I, Q) points and random angles over the whole circle are streamed
// one per clock. Each output is compared with the exact rotation computed
// in floating point, Q' = K (Q cos t - I sin t), I' = K (Q sin t + I cos t),
// K = prod sqrt(1 + 2^-2i), within 4 LSB. The latency must be ITER + 2.
module tb_iq_rotation;
  import bppm_pkg::*;

  localparam int unsigned ITER = 16;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    in_valid = 1'b0;
  iq_adc_t in_iq = '0;
  angle_t  theta = '0;
  logic    out_valid;
  iq_cor_t out_iq;
  int      checks = 0, failures = 0;

  iq_rotation #(.ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

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

  real  kgain;
  real  exp_i [$], exp_q [$];
  int   cyc = 0, first_in = -1, first_out = -1;

  always @(posedge clk) cyc <= cyc + 1;  // read in the active region: edges before this one

  initial begin
    kgain = 1.0;
    for (int i = 0; i < ITER; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      int   vi, vq, t;
      real  th;
      vi = $urandom_range(0, 65534) - 32767;
      vq = $urandom_range(0, 65534) - 32767;
      t  = $urandom_range(0, 2 * PI_Q) - PI_Q;
      if (n < 4) begin  // corner angles
        t = (n == 0) ? PI_Q : (n == 1) ? -PI_Q : (n == 2) ? 0 : 51472;
      end
      th = real'(t) / 32768.0;
      in_iq.i  <= adc_t'(vi);
      in_iq.q  <= adc_t'(vq);
      theta    <= angle_t'(t);
      in_valid <= 1'b1;
      exp_q.push_back(kgain * (vq * $cos(th) - vi * $sin(th)));
      exp_i.push_back(kgain * (vq * $sin(th) + vi * $cos(th)));
      if (first_in < 0) first_in = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (ITER + 5) @(posedge clk);
    if (exp_i.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_i.size());
    end
    checks++;
    if (first_out - first_in - 1 != ITER + 2) begin
      failures++;
      $display("latency %0d, expected %0d", first_out - first_in - 1, ITER + 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ei, eq;
      if (first_out < 0) first_out = cyc;
      ei = exp_i.pop_front();
      eq = exp_q.pop_front();
      checks++;
      if (rabs(real'(out_iq.i) - ei) > 4.0 || rabs(real'(out_iq.q) - eq) > 4.0) begin
        failures++;
        if (failures < 10)
          $display("rotation mismatch: got (I %0d, Q %0d) want (I %f, Q %f)", out_iq.i, out_iq.q, ei, eq);
      end
    end
  end

endmodule
