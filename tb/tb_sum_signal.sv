// tb_sum_signal: self-checking test of sum_signal.
// Random corrected samples, including full-scale extremes, are streamed;
// each output must equal the exact integer sums of I and of Q, one clock
// after its input.
module tb_sum_signal;
  import bppm_pkg::*;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid = 1'b0;
  iq_cor_t                 in_iq [N_CH];
  logic                    out_valid;
  logic signed [COR_W+1:0] out_i, out_q;
  int                      checks = 0, failures = 0;

  sum_signal dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int exp_i [$], exp_q [$];
  logic in_valid_d = 1'b0;
  always @(posedge clk) in_valid_d <= in_valid;

  initial begin
    for (int c = 0; c < N_CH; c++) in_iq[c] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 2000; n++) begin
      int si, sq;
      si = 0;
      sq = 0;
      for (int c = 0; c < N_CH; c++) begin
        int vi, vq;
        vi = (n < 2) ? ((n == 0) ? 131071 : -131072) : $urandom_range(0, 262143) - 131072;
        vq = (n < 2) ? ((n == 0) ? -131072 : 131071) : $urandom_range(0, 262143) - 131072;
        in_iq[c].i <= COR_W'(vi);
        in_iq[c].q <= COR_W'(vq);
        si += vi;
        sq += vq;
      end
      in_valid <= (n % 7 != 3);
      if (n % 7 != 3) begin
        exp_i.push_back(si);
        exp_q.push_back(sq);
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (exp_i.size() != 0) begin
      failures++;
      $display("%0d outputs missing", exp_i.size());
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
        int ei, eq;
        ei = exp_i.pop_front();
        eq = exp_q.pop_front();
        checks++;
        if (int'(out_i) != ei || int'(out_q) != eq) begin
          failures++;
          if (failures < 10) $display("mismatch: got (%0d,%0d) want (%0d,%0d)", out_i, out_q, ei, eq);
        end
      end
    end
  end

endmodule
