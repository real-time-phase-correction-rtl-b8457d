// tb_beam_phase: self-checking test of beam_phase.
// Random sum and MO phases over the whole circle are applied one per clock.
// Each result must equal the angle of exp(j(sum - mo)), i.e. the difference
// brought back into (-pi, pi], within 1 LSB, one clock after its input.
module tb_beam_phase;
  import bppm_pkg::*;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   in_valid = 1'b0;
  angle_t phase_sum = '0, phase_mo = '0;
  logic   out_valid;
  angle_t phase;
  int     checks = 0, failures = 0, n_wrap = 0;

  beam_phase dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_p [$];
  logic in_valid_d = 1'b0;
  always @(posedge clk) in_valid_d <= in_valid;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      int  s, m;
      real d, e;
      s = $urandom_range(0, 2 * PI_Q) - PI_Q;
      m = $urandom_range(0, 2 * PI_Q) - PI_Q;
      d = real'(s - m) / 32768.0;
      e = $atan2($sin(d), $cos(d)) * 32768.0;
      // Skip points within 2 LSB of the +-pi seam, where either side is right.
      if (e > real'(PI_Q) - 2.0 || e < -real'(PI_Q) + 2.0) continue;
      if (s - m > PI_Q || s - m <= -PI_Q) n_wrap++;
      phase_sum <= angle_t'(s);
      phase_mo  <= angle_t'(m);
      in_valid  <= 1'b1;
      exp_p.push_back(e);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_p.size() != 0 || n_wrap == 0) begin
      failures++;
      $display("%0d outputs missing, %0d wrapped cases", exp_p.size(), n_wrap);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid !== in_valid_d) begin
        failures++;
        $display("out_valid does not follow in_valid by one clock");
      end
      if (out_valid) begin
        real e;
        e = exp_p.pop_front();
        checks++;
        if (real'(phase) - e > 1.0 || e - real'(phase) > 1.0) begin
          failures++;
          if (failures < 10) $display("mismatch: got %0d want %f", phase, e);
        end
      end
    end
  end

endmodule
