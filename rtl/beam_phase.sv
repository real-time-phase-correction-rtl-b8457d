// beam_phase: the beam phase is the phase of the summed pick-up signal
// measured against the master-oscillator (MO) reference,
//   phase = phase_sum - phase_mo, wrapped into (-pi, pi].
// Taking the difference to the MO phase follows the design; the wrap rule
// and format (radians, Q3.15) are this implementation's choice.
//
// Interface: phase_sum/phase_mo/in_valid in, phase/out_valid out.
// Timing: one result per clock, latency 1 clock.
module beam_phase
  import bppm_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  angle_t phase_sum,
  input  angle_t phase_mo,
  output logic   out_valid,
  output angle_t phase
);

  always_ff @(posedge clk) begin
    logic signed [ANG_W:0] d;
    d = (ANG_W+1)'(phase_sum) - (ANG_W+1)'(phase_mo);
    if (d > (ANG_W+1)'(PI_Q))        d = d - (ANG_W+1)'(TWO_PI_Q);
    else if (d <= -(ANG_W+1)'(PI_Q)) d = d + (ANG_W+1)'(TWO_PI_Q);
    phase <= d[ANG_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
