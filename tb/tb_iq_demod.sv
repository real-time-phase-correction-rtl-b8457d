// tb_iq_demod: self-checking test of iq_demod.
// A stream of blocks is generated, each block holding one (I, Q) value
// repeated as I, Q, -I, -Q for two IF periods. Every output whose pair of
// samples falls inside one block must equal that block's (I, Q) exactly, one
// clock after the second sample. Gaps in in_valid are inserted at random.
module tb_iq_demod;
  import bppm_pkg::*;

  logic    clk = 1'b0, rst_n = 1'b0;
  logic    in_valid = 1'b0;
  adc_t    adc = '0;
  logic    out_valid;
  iq_adc_t out;
  int      checks = 0, failures = 0;

  iq_demod dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Samples issued so far and the block each belongs to.
  int     n_issued = 0;
  adc_t   exp_i [$], exp_q [$];
  int     blk_of [$];
  int     out_idx = 0;   // index of the second sample of the next output pair

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int b = 0; b < 300; b++) begin
      adc_t bi, bq;
      bi = adc_t'($urandom_range(0, 65535));
      bq = adc_t'($urandom_range(0, 65535));
      if (bi == adc_t'(-32768)) bi = adc_t'(-32767);
      if (bq == adc_t'(-32768)) bq = adc_t'(-32767);
      for (int k = 0; k < 8; k++) begin
        while ($urandom_range(0, 3) == 0) begin
          in_valid <= 1'b0;
          @(posedge clk);
        end
        case (k % 4)
          0: adc <= bi;
          1: adc <= bq;
          2: adc <= -bi;
          default: adc <= -bq;
        endcase
        in_valid <= 1'b1;
        exp_i.push_back(bi);
        exp_q.push_back(bq);
        blk_of.push_back(b);
        n_issued++;
        @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    if (checks < 2000) begin
      failures++;
      $display("too few checks: %0d", checks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker: the k-th output pairs samples k and k+1.
  logic in_valid_d;
  always_ff @(posedge clk) in_valid_d <= in_valid && rst_n;
  always @(posedge clk) begin
    if (rst_n) begin
      // out_valid must follow each valid sample but the first by one clock
      if (out_valid !== (in_valid_d && out_idx > 0)) begin
        failures++;
        $display("valid timing wrong at output %0d", out_idx);
      end
      if (in_valid_d) begin
        if (out_idx > 0 && out_valid) begin
          if (blk_of[out_idx] == blk_of[out_idx-1]) begin
            checks++;
            if (out.i !== exp_i[out_idx] || out.q !== exp_q[out_idx]) begin
              failures++;
              if (failures < 10)
                $display("mismatch at sample %0d: got (%0d,%0d) want (%0d,%0d)",
                         out_idx, out.i, out.q, exp_i[out_idx], exp_q[out_idx]);
            end
          end
        end
        out_idx++;
      end
    end
  end

endmodule
