// tb_position_calc: self-checking test of position_calc.
// Random amplitude pairs, scale factors and offsets are streamed one per
// clock, together with the corner cases a = b, b = 0, a = 0 and a = b = 0.
// Each result must match K (a - b) / (a + b) - offset computed in floating
// point within 1.5 output units (quotient truncation plus rounding), and
// must appear FRAC + 4 clocks after its input.
module tb_position_calc;

  localparam int unsigned AMP_W = 19;
  localparam int unsigned FRAC  = 16;

  logic                    clk = 1'b0, rst_n = 1'b0;
  logic                    in_valid = 1'b0;
  logic [AMP_W-1:0]        amp_a = '0, amp_b = '0;
  logic [15:0]             k = '0;
  logic signed [23:0]      offset = '0;
  logic                    out_valid;
  logic signed [23:0]      pos;
  int                      checks = 0, failures = 0;

  position_calc #(.AMP_W(AMP_W), .FRAC(FRAC)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real exp_p [$];
  int  cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // K and offset are set-up values: hold them for blocks of samples.
    for (int blk = 0; blk < 20; blk++) begin
      int kk, off;
      kk  = (blk == 0) ? 65535 : $urandom_range(1000, 40000);
      off = (blk == 0) ? 0 : $urandom_range(0, 4000) - 2000;
      repeat (FRAC + 6) @(posedge clk);   // let the previous block drain
      k      <= 16'(kk);
      offset <= 24'(off);
      @(posedge clk);
      for (int n = 0; n < 200; n++) begin
        int a, b;
        real e;
        a = $urandom_range(0, 2 ** AMP_W - 1);
        b = (n % 4 == 0) ? a + $urandom_range(0, 2000) - 1000 : $urandom_range(0, 2 ** AMP_W - 1);
        if (b < 0) b = 0;
        if (b >= 2 ** AMP_W) b = 2 ** AMP_W - 1;
        case (n)
          0: begin a = 1000; b = 1000; end
          1: begin a = 5000; b = 0;    end
          2: begin a = 0;    b = 7;    end
          3: begin a = 0;    b = 0;    end
          default: ;
        endcase
        e = (a + b == 0) ? 0.0 : real'(kk) * (real'(a) - real'(b)) / (real'(a) + real'(b));
        amp_a    <= AMP_W'(a);
        amp_b    <= AMP_W'(b);
        in_valid <= 1'b1;
        exp_p.push_back(e - real'(off));
        if (first_in < 0) first_in = cyc;
        @(posedge clk);
      end
      in_valid <= 1'b0;
    end
    repeat (FRAC + 8) @(posedge clk);
    checks++;
    if (first_out - first_in - 1 != FRAC + 4 || exp_p.size() != 0) begin
      failures++;
      $display("latency %0d (expected %0d), %0d outputs missing", first_out - first_in - 1, FRAC + 4, exp_p.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      real e;
      if (first_out < 0) first_out = cyc;
      e = exp_p.pop_front();
      checks++;
      if (real'(pos) - e > 1.5 || e - real'(pos) > 1.5) begin
        failures++;
        if (failures < 10) $display("position mismatch: got %0d want %f", pos, e);
      end
    end
  end

endmodule
