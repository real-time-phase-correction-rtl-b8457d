// iq_demod: recovers (I, Q) pairs from one under-sampled ADC stream.
//
// A 162.5 MHz carrier sampled at 50 MHz aliases to a 12.5 MHz IF with exactly
// four samples per IF period, so the stream reads I, Q, -I, -Q, I, ... where
// I = A sin(phi) and Q = A cos(phi). A 2-bit counter tracks the position in
// that sequence; each new sample is paired with the previous one and both are
// given their proper sign, so one (I, Q) pair leaves per ADC sample:
//   position 1: I =  prev, Q =  cur      position 2: I = -cur,  Q =  prev
//   position 3: I = -prev, Q = -cur      position 0: I =  cur,  Q = -prev
// The four-sample sequence follows the design; pairing every sample (rather
// than once per IF period) is this implementation's choice. All channels
// share one reset so that their counters, and so their phase references,
// stay aligned. Negating -32768 saturates to +32767.
//
// Interface: adc/in_valid in, out/out_valid out. Timing: one clock latency,
// one pair per valid sample (the very first sample after reset only primes
// the pairing and produces no output).
module iq_demod
  import bppm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  adc_t    adc,
  output logic    out_valid,
  output iq_adc_t out
);

  logic [1:0] pos;      // position of the current sample in I,Q,-I,-Q
  adc_t       prev;
  logic       primed;

  function automatic adc_t neg(input adc_t v);
    return (v == adc_t'(-32768)) ? adc_t'(32767) : adc_t'(-v);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pos       <= 2'd0;
      prev      <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid && primed;
      if (in_valid) begin
        pos    <= pos + 2'd1;
        prev   <= adc;
        primed <= 1'b1;
        unique case (pos)
          2'd1: begin out.i <= prev;      out.q <= adc;       end
          2'd2: begin out.i <= neg(adc);  out.q <= prev;      end
          2'd3: begin out.i <= neg(prev); out.q <= neg(adc);  end
          default: begin out.i <= adc;    out.q <= neg(prev); end
        endcase
      end
    end
  end

endmodule
