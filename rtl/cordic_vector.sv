// cordic_vector: pipelined CORDIC in vectoring mode, the shared engine of the
// phase and amplitude calculations.
//
// Given a point (x, y) = (Q, I) it returns the angle atan2(I, Q) (the phase
// arctan(I/Q) of the signal, over the full circle) and the length
// sqrt(I^2 + Q^2) multiplied by the CORDIC gain K (about 1.6468). A first
// stage folds the left half-plane onto the right one by a quarter turn,
// recording +-pi/2; ITER micro-rotation stages then drive y to zero while
// accumulating the angle. The structure and stage count are this
// implementation's choice.
//
// Interface: in_i/in_q (signed IN_W) and in_valid in; mag (signed IN_W+2,
// never negative), angle (radians, ZF = ANG_FRAC + 4 fraction bits, signed
// ANG_W + 4) and out_valid out. Timing: fully pipelined, one point per clock,
// latency ITER + 2 clocks.
module cordic_vector
  import bppm_pkg::*;
#(
  parameter int unsigned IN_W = 20,
  parameter int unsigned ITER = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic signed [IN_W-1:0]       in_i,
  input  logic signed [IN_W-1:0]       in_q,
  output logic                         out_valid,
  output logic signed [IN_W+1:0]       mag,
  output logic signed [ANG_W+3:0]      angle
);

  localparam int unsigned G  = 4;
  localparam int unsigned XW = IN_W + 2 + G;
  localparam int unsigned ZF = ANG_FRAC + 4;
  localparam int unsigned ZW = ANG_W + 4;

  typedef logic signed [XW-1:0] xw_t;
  typedef logic signed [ZW-1:0] zw_t;

  localparam zw_t HALF_PI = zw_t'(half_pi_frac(ZF));

  xw_t x [ITER+1];
  xw_t y [ITER+1];
  zw_t z [ITER+1];
  logic [ITER+1:0] v;

  xw_t x_in, y_in;
  always_comb begin
    x_in = xw_t'(in_q) <<< G;
    y_in = xw_t'(in_i) <<< G;
  end

  // Stage 0: fold x < 0 onto the right half-plane.
  always_ff @(posedge clk) begin
    if (x_in[XW-1] && !y_in[XW-1]) begin  // second quadrant: turn -90
      x[0] <= y_in;
      y[0] <= -x_in;
      z[0] <= HALF_PI;
    end else if (x_in[XW-1]) begin        // third quadrant: turn +90
      x[0] <= -y_in;
      y[0] <= x_in;
      z[0] <= -HALF_PI;
    end else begin
      x[0] <= x_in;
      y[0] <= y_in;
      z[0] <= '0;
    end
  end

  for (genvar s = 0; s < ITER; s++) begin : g_stage
    localparam zw_t ATAN_S = zw_t'(atan_frac(s, ZF));
    always_ff @(posedge clk) begin
      if (y[s][XW-1]) begin    // y < 0: rotate counter-clockwise
        x[s+1] <= x[s] - (y[s] >>> s);
        y[s+1] <= y[s] + (x[s] >>> s);
        z[s+1] <= z[s] - ATAN_S;
      end else begin           // y >= 0: rotate clockwise
        x[s+1] <= x[s] + (y[s] >>> s);
        y[s+1] <= y[s] - (x[s] >>> s);
        z[s+1] <= z[s] + ATAN_S;
      end
    end
  end

  always_ff @(posedge clk) begin
    xw_t r;
    r = (x[ITER] + (xw_t'(1) <<< (G - 1))) >>> G;
    mag   <= r[IN_W+1:0];
    angle <= z[ITER];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[ITER:0], in_valid};
  end
  assign out_valid = v[ITER+1];

endmodule
