// sum_signal: digital summation of the four corrected channels.
//
// The BPM phase must be taken from the sum of all four pick-ups so that it
// does not depend on the beam position. Because every channel has already
// been rotated and scaled to remove its own delay and gain error, the sum is
// formed digitally, I and Q separately, at full precision (two extra bits).
// Summing after correction follows the design; the register stage is this
// implementation's choice.
//
// Interface: in_iq[N_CH]/in_valid in, out_i/out_q/out_valid out.
// Timing: one sample per clock, latency 1 clock.
module sum_signal
  import bppm_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  iq_cor_t                 in_iq [N_CH],
  output logic                    out_valid,
  output logic signed [COR_W+1:0] out_i,
  output logic signed [COR_W+1:0] out_q
);

  always_ff @(posedge clk) begin
    logic signed [COR_W+1:0] si, sq;
    si = '0;
    sq = '0;
    for (int c = 0; c < N_CH; c++) begin
      si += (COR_W+2)'(in_iq[c].i);
      sq += (COR_W+2)'(in_iq[c].q);
    end
    out_i <= si;
    out_q <= sq;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
