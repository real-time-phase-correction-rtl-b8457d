// channel_correction: the complete correction path of one channel.
//
// Phase correction (iq_rotation, turning the sample by the calibrated angle)
// is followed by amplitude correction (amplitude_correction, scaling by the
// calibrated gain factor). A delay line pads the path so that a sample takes
// exactly LATENCY clocks from input to output: 25 clocks, i.e. 500 ns at the
// 50 MHz sample clock, the latency quoted for the original implementation.
// The two steps and their order follow the design; the padding is this
// implementation's way of matching the quoted latency (the rotation and the
// multiplier themselves take ITER + 4 = 20 clocks).
//
// Interface: in_iq/in_valid plus the channel's theta and gain coefficients
// in, both sampled together with in_iq; out_iq/out_valid out. Timing: one sample per clock, latency LATENCY.
module channel_correction
  import bppm_pkg::*;
#(
  parameter int unsigned ITER    = 16,
  parameter int unsigned LATENCY = 25
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  iq_adc_t in_iq,
  input  angle_t  theta,
  input  gcoef_t  gain,
  output logic    out_valid,
  output iq_cor_t out_iq
);

  localparam int unsigned CORE_LAT = ITER + 2 + 2;
  localparam int unsigned PAD      = LATENCY - CORE_LAT;

  initial assert (LATENCY >= CORE_LAT)
    else $error("channel_correction: LATENCY %0d below core latency %0d", LATENCY, CORE_LAT);

  logic    rot_valid, amp_valid;
  iq_cor_t rot_iq, amp_iq;

  iq_rotation #(.ITER(ITER)) u_rot (
    .clk, .rst_n, .in_valid, .in_iq, .theta,
    .out_valid(rot_valid), .out_iq(rot_iq)
  );

  // The gain factor travels beside its sample through the rotation, so that
  // a coefficient change (after a gain step) applies to whole samples.
  localparam int unsigned ROT_LAT = ITER + 2;
  gcoef_t gain_d [ROT_LAT];
  always_ff @(posedge clk) begin
    gain_d[0] <= gain;
    for (int k = 1; k < ROT_LAT; k++) gain_d[k] <= gain_d[k-1];
  end

  amplitude_correction u_amp (
    .clk, .rst_n, .in_valid(rot_valid), .in_iq(rot_iq), .gain(gain_d[ROT_LAT-1]),
    .out_valid(amp_valid), .out_iq(amp_iq)
  );

  if (PAD == 0) begin : g_nopad
    assign out_valid = amp_valid;
    assign out_iq    = amp_iq;
  end else begin : g_pad
    iq_cor_t    d_iq [PAD];
    logic [PAD-1:0] d_v;
    always_ff @(posedge clk) begin
      d_iq[0] <= amp_iq;
      for (int k = 1; k < PAD; k++) d_iq[k] <= d_iq[k-1];
    end
    always_ff @(posedge clk) begin
      if (!rst_n) d_v <= '0;
      else        d_v <= PAD'({d_v, amp_valid});
    end
    assign out_valid = d_v[PAD-1];
    assign out_iq    = d_iq[PAD-1];
  end

endmodule
