// tb_phase_calc: self-checking test of phase_calc.
// Random 20-bit (I, Q) points, plus the axes and the negative-Q axis, are
// streamed one per clock. Each phase must match atan2(I, Q) in radians Q3.15
// within 4 LSB (about 0.007 degrees) plus 8192/|v| LSB, the resolution the
// datapath has for a vector of length |v|, taking +pi and -pi as equal; it
// must come ITER + 3 clocks after its input.
module tb_phase_calc;
  import bppm_pkg::*;

  localparam int unsigned IN_W = 20;
  localparam int unsigned ITER = 16;

  logic                   clk = 1'b0, rst_n = 1'b0;
  logic                   in_valid = 1'b0;
  logic signed [IN_W-1:0] in_i = '0, in_q = '0;
  logic                   out_valid;
  angle_t                 phase;
  int                     checks = 0, failures = 0;

  phase_calc #(.IN_W(IN_W), .ITER(ITER)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_p [$], tol [$];
  int  cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      int vi, vq;
      vi = $urandom_range(0, 2 ** IN_W - 2) - (2 ** (IN_W - 1) - 1);
      vq = $urandom_range(0, 2 ** IN_W - 2) - (2 ** (IN_W - 1) - 1);
      if (n % 500 < 8) begin  // small vectors: precision at low amplitude
        vi = vi / 4096;
        vq = vq / 4096;
        if (vi == 0 && vq == 0) vq = 1;
      end
      case (n)
        0: begin vi = 0;      vq = 100000;  end
        1: begin vi = 100000; vq = 0;       end
        2: begin vi = -5000;  vq = -300000; end
        3: begin vi = 0;      vq = -300000; end
        default: ;
      endcase
      in_i <= IN_W'(vi);
      in_q <= IN_W'(vq);
      in_valid <= 1'b1;
      exp_p.push_back($atan2(real'(vi), real'(vq)) * 32768.0);
      tol.push_back(4.0 + 8192.0 / $sqrt(real'(vi) ** 2 + real'(vq) ** 2));
      if (first_in < 0) first_in = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (ITER + 6) @(posedge clk);
    checks++;
    if (first_out - first_in - 1 != ITER + 3 || exp_p.size() != 0) begin
      failures++;
      $display("latency %0d (expected %0d), %0d outputs missing", first_out - first_in - 1, ITER + 3, exp_p.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e, d, t;
      if (first_out < 0) first_out = cyc;
      e = exp_p.pop_front();
      t = tol.pop_front();
      d = real'(phase) - e;
      if (d > 32768.0 * 3.14159265) d = d - 2.0 * 32768.0 * 3.14159265358979;
      if (d < -32768.0 * 3.14159265) d = d + 2.0 * 32768.0 * 3.14159265358979;
      checks++;
      if (d > t || d < -t) begin
        failures++;
        if (failures < 10) $display("phase mismatch: got %0d want %f", phase, e);
      end
    end
  end

endmodule
