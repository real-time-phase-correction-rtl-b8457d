// iq_rotation: phase correction of one channel by vector rotation.
//
// The (Q, I) sample is treated as a point in the plane (Q on the horizontal
// axis, I on the vertical one) and turned counter-clockwise by theta:
//   Q' = Q cos(theta) - I sin(theta),   I' = Q sin(theta) + I cos(theta).
// This is done by a pipelined CORDIC in rotation mode: a first stage turns
// the point by a quarter turn when |theta| > pi/2, so any angle in
// (-pi, pi] is reachable, then ITER micro-rotation stages by +-atan(2^-i),
// one per clock, drive the residual angle to zero. The output carries the
// CORDIC gain K = prod sqrt(1 + 2^-2i) (about 1.6468 for 16 stages); the
// gain-correction multiplier that follows absorbs it, since the calibration
// is measured end to end. Rotation as the correction method follows the
// design; the CORDIC structure, widths and stage count are this
// implementation's choice (the original used a vendor CORDIC core).
//
// Interface: in_iq/theta/in_valid in, out_iq/out_valid out; theta is
// radians Q3.15 and must lie in [-pi, pi]. Timing: fully pipelined, one
// sample per clock, latency ITER + 2 clocks.
module iq_rotation
  import bppm_pkg::*;
#(
  parameter int unsigned ITER = 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  iq_adc_t in_iq,
  input  angle_t  theta,
  output logic    out_valid,
  output iq_cor_t out_iq
);

  localparam int unsigned G   = 4;                 // guard fraction bits
  localparam int unsigned XW  = COR_W + G;         // datapath width: 16 + 2 growth + guard
  localparam int unsigned ZF  = ANG_FRAC + 4;      // residual-angle fraction bits
  localparam int unsigned ZW  = ANG_W + 4;

  typedef logic signed [XW-1:0] xw_t;
  typedef logic signed [ZW-1:0] zw_t;

  localparam zw_t HALF_PI = zw_t'(half_pi_frac(ZF));

  xw_t x [ITER+1];
  xw_t y [ITER+1];
  zw_t z [ITER+1];
  logic [ITER+1:0] v;

  // Stage 0: quarter-turn pre-rotation.
  xw_t x_in, y_in;
  zw_t z_in;
  always_comb begin
    x_in = xw_t'(in_iq.q) <<< G;
    y_in = xw_t'(in_iq.i) <<< G;
    z_in = zw_t'(theta) <<< (ZF - ANG_FRAC);
  end

  always_ff @(posedge clk) begin
    if (z_in > HALF_PI) begin          // turn +90: (x, y) -> (-y, x)
      x[0] <= -y_in;
      y[0] <= x_in;
      z[0] <= z_in - HALF_PI;
    end else if (z_in < -HALF_PI) begin // turn -90: (x, y) -> (y, -x)
      x[0] <= y_in;
      y[0] <= -x_in;
      z[0] <= z_in + HALF_PI;
    end else begin
      x[0] <= x_in;
      y[0] <= y_in;
      z[0] <= z_in;
    end
  end

  // Micro-rotation stages.
  for (genvar s = 0; s < ITER; s++) begin : g_stage
    localparam zw_t ATAN_S = zw_t'(atan_frac(s, ZF));
    always_ff @(posedge clk) begin
      if (!z[s][ZW-1]) begin   // residual >= 0: rotate counter-clockwise
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - ATAN_S;
      end else begin
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + ATAN_S;
      end
    end
  end

  // Output: drop the guard bits with round-half-up.
  function automatic logic signed [COR_W-1:0] rnd(input xw_t a);
    xw_t r;
    r = (a + (xw_t'(1) <<< (G - 1))) >>> G;
    return r[COR_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    out_iq.q <= rnd(x[ITER]);
    out_iq.i <= rnd(y[ITER]);
  end

  // Valid pipeline.
  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[ITER:0], in_valid};
  end
  assign out_valid = v[ITER+1];

endmodule
