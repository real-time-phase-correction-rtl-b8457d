// tb_correction_lut: self-checking test of correction_lut.
// The whole 256-word memory is loaded with random words, kept in a model
// array here. For a sequence of random gain settings the block must present,
// within 5 clocks of the change and with coef_valid high, the four words at
// {channel, gain}; coef_valid must drop while a change is being read.
// Rewriting a word of the current gain must show up on the outputs.
module tb_correction_lut;
  import bppm_pkg::*;

  logic              clk = 1'b0, rst_n = 1'b0;
  gain_t             gain = '0;
  logic              wr_en = 1'b0;
  logic [LUT_AW-1:0] wr_addr = '0;
  lut_word_t         wr_data = '0;
  angle_t            phase_coef [N_CH];
  gcoef_t            gain_coef  [N_CH];
  logic              coef_valid;
  int                checks = 0, failures = 0;

  correction_lut dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  lut_word_t model [LUT_DEPTH];

  task automatic check_outputs(input string what);
    for (int c = 0; c < N_CH; c++) begin
      lut_word_t w;
      w = model[{2'(c), gain}];
      checks++;
      if (phase_coef[c] !== w.phase || gain_coef[c] !== w.gain) begin
        failures++;
        if (failures < 10)
          $display("%s: ch %0d gain %0d got (%h,%h) want (%h,%h)", what, c, gain,
                   phase_coef[c], gain_coef[c], w.phase, w.gain);
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    for (int a = 0; a < LUT_DEPTH; a++) begin
      lut_word_t w;
      w = lut_word_t'({$urandom(), $urandom()});
      model[a] = w;
      wr_en   <= 1'b1;
      wr_addr <= LUT_AW'(a);
      wr_data <= w;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    for (int n = 0; n < 300; n++) begin
      gain_t g;
      int    t;
      g = gain_t'($urandom_range(0, GAIN_MAX));
      if (g == gain) g = gain_t'((g + 1) % (GAIN_MAX + 1));
      gain <= g;
      @(posedge clk);
      #1;
      checks++;
      if (coef_valid) begin
        failures++;
        $display("coef_valid stayed high after a gain change");
      end
      t = 1;
      while (!coef_valid && t < 10) begin
        @(posedge clk);
        #1;
        t++;
      end
      checks++;
      if (t > 5) begin
        failures++;
        $display("coefficients took %0d clocks", t);
      end
      check_outputs("after gain change");
      // occasionally rewrite one word of the current gain
      if (n % 10 == 0) begin
        int        c;
        lut_word_t w;
        c = $urandom_range(0, N_CH - 1);
        w = lut_word_t'({$urandom(), $urandom()});
        model[{2'(c), gain}] = w;
        @(negedge clk);
        wr_en   = 1'b1;
        wr_addr = {2'(c), gain};
        wr_data = w;
        @(negedge clk);
        wr_en = 1'b0;
        repeat (6) @(posedge clk);
        #1;
        checks++;
        if (!coef_valid) begin
          failures++;
          $display("coef_valid low 6 clocks after a write");
        end
        check_outputs("after rewrite");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
