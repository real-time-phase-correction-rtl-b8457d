// tb_phase_averager: self-checking test of phase_averager.
// The block size is reduced to 2^6 to keep the run short (the rule does not
// depend on it). Random phases arrive with random gaps; every block's mean
// must equal floor((sum + 2^5) / 2^6) computed here with integer division,
// with one out_valid pulse per block, one clock after its last sample.
module tb_phase_averager;
  import bppm_pkg::*;

  localparam int unsigned LOG2N = 6;
  localparam int unsigned N     = 1 << LOG2N;

  logic   clk = 1'b0, rst_n = 1'b0;
  logic   in_valid = 1'b0;
  angle_t phase = '0;
  logic   out_valid;
  angle_t mean;
  int     checks = 0, failures = 0;

  phase_averager #(.LOG2N(LOG2N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_m [$];
  int     n_out = 0;
  logic   last_d = 1'b0;   // the previous clock presented a block's last sample

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int b = 0; b < 100; b++) begin
      longint sum, centre;
      sum = 0;
      centre = longint'($urandom_range(0, 2 * PI_Q)) - PI_Q;
      for (int n = 0; n < N; n++) begin
        longint v;
        while ($urandom_range(0, 4) == 0) begin
          in_valid <= 1'b0;
          last_d   <= 1'b0;
          @(posedge clk);
        end
        v = centre + longint'($urandom_range(0, 20000)) - 10000;
        if (v > PI_Q) v = PI_Q;
        if (v < -PI_Q) v = -PI_Q;
        sum += v;
        phase    <= angle_t'(v);
        in_valid <= 1'b1;
        last_d   <= (n == N - 1);
        @(posedge clk);
      end
      sum += N / 2;
      exp_m.push_back((sum >= 0) ? sum / N : -((-sum + N - 1) / N));
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (n_out != 100) begin
      failures++;
      $display("%0d means for 100 blocks", n_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic last_q = 1'b0;
  always @(posedge clk) last_q <= last_d && in_valid;

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid !== last_q) begin
        failures++;
        $display("out_valid timing wrong");
      end
      if (out_valid) begin
        longint e;
        n_out++;
        e = exp_m.pop_front();
        checks++;
        if (longint'(mean) != e) begin
          failures++;
          if (failures < 10) $display("mean mismatch: got %0d want %0d", mean, e);
        end
      end
    end
  end

endmodule
