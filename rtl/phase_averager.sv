// phase_averager: block average of the beam phase.
//
// The final phase value is the mean of 2^LOG2N (64k by default) consecutive
// beam-phase results: they are summed in a wide accumulator and the sum is
// shifted right by LOG2N with rounding once the block is complete. Averaging
// 64k samples follows the design's measurement procedure; doing it as a
// plain block average in logic is this implementation's choice. Phases near
// +-pi are not unwrapped before averaging.
//
// Interface: phase/in_valid in, mean and a one-clock out_valid pulse per
// block out. Timing: out_valid comes 1 clock after the block's last sample.
module phase_averager
  import bppm_pkg::*;
#(
  parameter int unsigned LOG2N = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  angle_t phase,
  output logic   out_valid,
  output angle_t mean
);

  localparam int unsigned AW = ANG_W + LOG2N;
  typedef logic signed [AW-1:0] acc_t;

  acc_t             acc;
  logic [LOG2N-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      cnt       <= '0;
      out_valid <= 1'b0;
      mean      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        acc_t s;
        s = acc + AW'(phase);
        cnt <= cnt + 1'b1;
        if (&cnt) begin
          acc_t r;
          r = (s + (acc_t'(1) <<< (LOG2N - 1))) >>> LOG2N;
          mean      <= r[ANG_W-1:0];
          out_valid <= 1'b1;
          acc       <= '0;
        end else begin
          acc <= s;
        end
      end
    end
  end

endmodule
