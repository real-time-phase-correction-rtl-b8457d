// tb_amplitude_correction: self-checking test of amplitude_correction.
// Random samples and gain factors (unsigned Q2.16) are streamed one per
// clock; each output must equal round(x * g / 2^16) saturated to 18 bits,
// computed here in integer arithmetic, 2 clocks after its input. Large
// factors are included so that saturation is exercised.
module tb_amplitude_correction;
  import bppm_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    in_valid = 1'b0;
  iq_cor_t in_iq = '0;
  gcoef_t  gain = '0;
  logic    out_valid;
  iq_cor_t out_iq;
  int      checks = 0, failures = 0, n_sat = 0;

  amplitude_correction dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_val(input longint x, input longint g);
    longint p, r;
    p = x * g;
    // round half up = floor((p + 2^15) / 2^16), written with integer division
    p = p + 32768;
    r = (p >= 0) ? p / 65536 : -((-p + 65535) / 65536);
    if (r > 131071) r = 131071;
    if (r < -131072) r = -131072;
    return r;
  endfunction

  longint exp_i [$], exp_q [$];
  int     cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc <= cyc + 1;  // read in the active region: edges before this one

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int n = 0; n < 3000; n++) begin
      longint vi, vq, g;
      vi = longint'($urandom_range(0, 262143)) - 131072;
      vq = longint'($urandom_range(0, 262143)) - 131072;
      g  = (n % 3 == 0) ? longint'($urandom_range(0, 262143)) : longint'($urandom_range(30000, 70000));
      in_iq.i  <= vi[17:0];
      in_iq.q  <= vq[17:0];
      gain     <= g[17:0];
      in_valid <= 1'b1;
      exp_i.push_back(expect_val(vi, g));
      exp_q.push_back(expect_val(vq, g));
      if (first_in < 0) first_in = cyc;
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (first_out - first_in - 1 != 2 || exp_i.size() != 0) begin
      failures++;
      $display("latency %0d (expected 2), %0d outputs missing", first_out - first_in - 1, exp_i.size());
    end
    checks++;
    if (n_sat == 0) begin
      failures++;
      $display("saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint ei, eq;
      if (first_out < 0) first_out = cyc;
      ei = exp_i.pop_front();
      eq = exp_q.pop_front();
      if (ei == 131071 || ei == -131072) n_sat++;
      checks++;
      if (longint'(out_iq.i) != ei || longint'(out_iq.q) != eq) begin
        failures++;
        if (failures < 10)
          $display("mismatch: got (%0d,%0d) want (%0d,%0d)", out_iq.i, out_iq.q, ei, eq);
      end
    end
  end

endmodule
