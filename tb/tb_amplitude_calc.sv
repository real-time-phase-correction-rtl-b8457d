// tb_amplitude_calc: self-checking test of amplitude_calc.
// Random corrected (I, Q) pairs for the two channels are streamed one per
// clock. Each amplitude must match K * sqrt(I^2 + Q^2) (K the CORDIC gain)
// within 4 LSB, ITER + 2 clocks after its input.
module tb_amplitude_calc;
  import bppm_pkg::*;

  localparam int unsigned ITER = 16;

  logic           clk = 1'b0, rst_n = 1'b0;
  logic           in_valid = 1'b0;
  iq_cor_t        in_iq [2];
  logic           out_valid;
  logic [COR_W:0] amp [2];
  int             checks = 0, failures = 0;

  amplitude_calc #(.ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real kgain;
  real exp_a [$], exp_b [$];
  int  cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    kgain = 1.0;
    for (int i = 0; i < ITER; i++) kgain = kgain * $sqrt(1.0 + 2.0 ** (-2.0 * i));
    in_iq[0] = '0;
    in_iq[1] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      int v [4];
      foreach (v[k]) v[k] = $urandom_range(0, 262142) - 131071;
      if (n == 0) v = '{131071, -131071, -131071, 131071};
      in_iq[0].i <= COR_W'(v[0]);
      in_iq[0].q <= COR_W'(v[1]);
      in_iq[1].i <= COR_W'(v[2]);
      in_iq[1].q <= COR_W'(v[3]);
      in_valid <= 1'b1;
      exp_a.push_back(kgain * $sqrt(real'(v[0]) ** 2 + real'(v[1]) ** 2));
      exp_b.push_back(kgain * $sqrt(real'(v[2]) ** 2 + real'(v[3]) ** 2));
      if (first_in < 0) first_in = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (ITER + 6) @(posedge clk);
    checks++;
    if (first_out - first_in - 1 != ITER + 2 || exp_a.size() != 0) begin
      failures++;
      $display("latency %0d (expected %0d), %0d outputs missing", first_out - first_in - 1, ITER + 2, exp_a.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real ea, eb;
      if (first_out < 0) first_out = cyc;
      ea = exp_a.pop_front();
      eb = exp_b.pop_front();
      checks++;
      if (real'(amp[0]) - ea > 4.0 || ea - real'(amp[0]) > 4.0 ||
          real'(amp[1]) - eb > 4.0 || eb - real'(amp[1]) > 4.0) begin
        failures++;
        if (failures < 10) $display("amplitude mismatch: got (%0d,%0d) want (%f,%f)", amp[0], amp[1], ea, eb);
      end
    end
  end

endmodule
