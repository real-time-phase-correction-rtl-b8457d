// position_calc: beam position from two opposite pick-up amplitudes by the
// difference-over-sum rule,
//   pos = K * (Va - Vb) / (Va + Vb) - offset.
//
// The ratio |Va - Vb| / (Va + Vb) lies in [0, 1]; a restoring divider
// develops it one quotient bit per pipeline stage (FRAC + 1 stages, the
// first being the integer bit that is set only when one amplitude is zero).
// The quotient is then scaled by K (unsigned, in the output's length unit,
// e.g. micrometres), rounded, given the sign of Va - Vb, and the offset is
// subtracted. A zero sum (no beam) gives a zero ratio. The formula follows
// the design; the divider, widths, units and the zero-sum rule are this
// implementation's choice. K and offset are treated as quasi-static set-up
// values and are sampled in the last stage.
//
// Interface: amp_a/amp_b/in_valid in, k/offset set-up, pos/out_valid out.
// Timing: one result per clock, latency FRAC + 4 clocks.
module position_calc
#(
  parameter int unsigned AMP_W = 19,
  parameter int unsigned FRAC  = 16,
  parameter int unsigned K_W   = 16,
  parameter int unsigned POS_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [AMP_W-1:0]        amp_a,
  input  logic [AMP_W-1:0]        amp_b,
  input  logic [K_W-1:0]          k,
  input  logic signed [POS_W-1:0] offset,
  output logic                    out_valid,
  output logic signed [POS_W-1:0] pos
);

  localparam int unsigned SW = AMP_W + 1;      // sum width
  localparam int unsigned NS = FRAC + 1;       // divider stages
  localparam int unsigned QW = FRAC + 1;       // quotient width

  typedef logic [SW:0] rem_t;                  // one spare bit for the shift

  // Stage 0: difference and sum.
  rem_t          r   [NS+1];
  logic [SW-1:0] den [NS+1];
  logic [QW-1:0] q   [NS+1];
  logic          neg [NS+1];
  logic          zero[NS+1];
  logic [NS+3:0] v;

  always_ff @(posedge clk) begin
    logic [SW-1:0] s;
    s = SW'(amp_a) + SW'(amp_b);
    den[0]  <= s;
    zero[0] <= (s == '0);
    neg[0]  <= amp_b > amp_a;
    r[0]    <= (amp_a >= amp_b) ? (SW+1)'(amp_a - amp_b) : (SW+1)'(amp_b - amp_a);
    q[0]    <= '0;
  end

  // Divider stages: stage t decides quotient bit QW-1-t.
  for (genvar t = 0; t < NS; t++) begin : g_div
    always_ff @(posedge clk) begin
      rem_t rr;
      rr = (t == 0) ? r[t] : (r[t] << 1);
      den[t+1]  <= den[t];
      zero[t+1] <= zero[t];
      neg[t+1]  <= neg[t];
      if (rr >= rem_t'(den[t])) begin
        r[t+1] <= rr - rem_t'(den[t]);
        q[t+1] <= q[t] | (QW'(1) << (QW - 1 - t));
      end else begin
        r[t+1] <= rr;
        q[t+1] <= q[t];
      end
    end
  end

  // Scale by K.
  localparam int unsigned PW = QW + K_W;
  logic [PW-1:0] prod;
  logic          neg_p;
  always_ff @(posedge clk) begin
    prod  <= zero[NS] ? '0 : PW'(q[NS]) * PW'(k);
    neg_p <= neg[NS];
  end

  // Round, sign, offset.
  always_ff @(posedge clk) begin
    logic [PW-1:0]           m;
    logic signed [POS_W-1:0] sm;
    m   = (prod + (PW'(1) << (FRAC - 1))) >> FRAC;
    sm  = neg_p ? -POS_W'(m) : POS_W'(m);
    pos <= sm - offset;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[NS+2:0], in_valid};
  end
  assign out_valid = v[NS+2];

endmodule
