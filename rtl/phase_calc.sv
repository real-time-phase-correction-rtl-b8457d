// phase_calc: phase of an IQ stream, Phase = arctan(I/Q) over the full
// circle, in radians Q3.15 within [-pi, pi].
//
// A cordic_vector pipeline computes the angle with four extra fraction bits;
// this block rounds it to the 18-bit angle format and folds a result that
// rounding pushed just past +-pi back to the boundary. It serves both the
// summed signal and the MO reference. Using CORDIC for the phase follows the
// design; the formats are this implementation's choice.
//
// Interface: in_i/in_q (signed IN_W), in_valid in; phase, out_valid out.
// Timing: one sample per clock, latency ITER + 3 clocks.
module phase_calc
  import bppm_pkg::*;
#(
  parameter int unsigned IN_W = 20,
  parameter int unsigned ITER = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_i,
  input  logic signed [IN_W-1:0] in_q,
  output logic                   out_valid,
  output angle_t                 phase
);

  logic                    cv_valid;
  logic signed [IN_W+1:0]  cv_mag;
  logic signed [ANG_W+3:0] cv_angle;

  cordic_vector #(.IN_W(IN_W), .ITER(ITER)) u_cordic (
    .clk, .rst_n, .in_valid, .in_i, .in_q,
    .out_valid(cv_valid), .mag(cv_mag), .angle(cv_angle)
  );

  always_ff @(posedge clk) begin
    logic signed [ANG_W+3:0] r;
    r = (cv_angle + 22'sd8) >>> 4;
    if (r > (ANG_W+4)'(PI_Q))       phase <= angle_t'(PI_Q);
    else if (r < -(ANG_W+4)'(PI_Q)) phase <= angle_t'(-PI_Q);
    else                        phase <= r[ANG_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= cv_valid;
  end

endmodule
