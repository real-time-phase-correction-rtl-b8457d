// amplitude_calc: amplitudes of a pair of corrected channels (A and B for
// the horizontal plane, C and D for the vertical one).
//
// Each channel's amplitude sqrt(I^2 + Q^2) comes from its own cordic_vector
// pipeline. The CORDIC gain (about 1.6468) is common to both channels and
// cancels in the difference-over-sum position formula, so it is kept.
// Computing the amplitudes with CORDIC follows the design.
//
// Interface: in_iq[2]/in_valid in; amp[2] (unsigned COR_W + 1 bits) and
// out_valid out. Timing: one sample per clock, latency ITER + 2 clocks.
module amplitude_calc
  import bppm_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  iq_cor_t          in_iq [2],
  output logic             out_valid,
  output logic [COR_W:0]   amp   [2]
);

  logic [1:0] v;

  for (genvar c = 0; c < 2; c++) begin : g_ch
    logic signed [COR_W+1:0]  mag;
    logic signed [ANG_W+3:0]  ang_unused;
    cordic_vector #(.IN_W(COR_W), .ITER(ITER)) u_cordic (
      .clk, .rst_n, .in_valid,
      .in_i(in_iq[c].i), .in_q(in_iq[c].q),
      .out_valid(v[c]), .mag(mag), .angle(ang_unused)
    );
    // The magnitude is never negative; drop the sign bit.
    assign amp[c] = mag[COR_W:0];
  end

  assign out_valid = v[0];

endmodule
