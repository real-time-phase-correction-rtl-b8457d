// amplitude_correction: gain-error correction of one channel.
//
// Both components of the rotated sample are multiplied by the channel's
// gain-correction factor (unsigned Q2.16, from the calibration memory),
// rounded half-up back to 18 bits and saturated. Correcting gain by plain
// multiplication follows the design; the factor format and the two-stage
// pipeline (multiply, then round and saturate) are this implementation's
// choice. The factor also absorbs the gain of the preceding CORDIC rotation.
//
// Interface: in_iq/gain/in_valid in, out_iq/out_valid out.
// Timing: one sample per clock, latency 2 clocks.
module amplitude_correction
  import bppm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  iq_cor_t in_iq,
  input  gcoef_t  gain,
  output logic    out_valid,
  output iq_cor_t out_iq
);

  localparam int unsigned PW = COR_W + COEF_W + 1;
  typedef logic signed [PW-1:0] prod_t;

  prod_t p_i, p_q;
  logic  v1;

  always_ff @(posedge clk) begin
    p_i <= prod_t'(in_iq.i) * prod_t'({1'b0, gain});
    p_q <= prod_t'(in_iq.q) * prod_t'({1'b0, gain});
  end

  function automatic logic signed [COR_W-1:0] rnd_sat(input prod_t p);
    prod_t r;
    r = (p + (prod_t'(1) <<< (GCOEF_FRAC - 1))) >>> GCOEF_FRAC;
    if (r > prod_t'(2 ** (COR_W - 1) - 1)) return {1'b0, {(COR_W-1){1'b1}}};
    if (r < -prod_t'(2 ** (COR_W - 1)))    return {1'b1, {(COR_W-1){1'b0}}};
    return r[COR_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    out_iq.i <= rnd_sat(p_i);
    out_iq.q <= rnd_sat(p_q);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      out_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
    end
  end

endmodule
