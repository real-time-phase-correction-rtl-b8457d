// bppm_pkg: types and constants shared by the beam position and phase
// measurement (BPPM) correction datapath.
//
// Number formats used throughout:
//   * ADC samples: 16-bit signed two's complement (the front end uses 16-bit
//     ADCs clocked at 50 MHz).
//   * Angles: 18-bit signed radians with 15 fraction bits (Q3.15, range about
//     +-4 rad), the width of one calibration word.
//   * Gain-correction factors: 18-bit unsigned with 16 fraction bits (Q2.16).
//   * Corrected IQ samples: 18-bit signed.
// The 18-bit widths of the two calibration words follow the design; the
// fixed-point formats are this implementation's choice.
package bppm_pkg;

  localparam int unsigned N_CH      = 4;   // pick-ups A (right), B (left), C (top), D (bottom)
  localparam int unsigned ADC_W     = 16;
  localparam int unsigned COR_W     = 18;  // corrected IQ width
  localparam int unsigned ANG_W     = 18;  // angle width
  localparam int unsigned ANG_FRAC  = 15;  // angle fraction bits (radians)
  localparam int unsigned COEF_W    = 18;  // each calibration word
  localparam int unsigned GCOEF_FRAC = 16; // gain-factor fraction bits
  localparam int unsigned GAIN_W    = 6;   // gain setting in dB, 0..60
  localparam int unsigned GAIN_MAX  = 60;

  typedef logic signed [ADC_W-1:0]  adc_t;
  typedef logic signed [ANG_W-1:0]  angle_t;
  typedef logic        [COEF_W-1:0] gcoef_t;
  typedef logic        [GAIN_W-1:0] gain_t;

  typedef struct packed {
    logic signed [ADC_W-1:0] i;
    logic signed [ADC_W-1:0] q;
  } iq_adc_t;

  typedef struct packed {
    logic signed [COR_W-1:0] i;
    logic signed [COR_W-1:0] q;
  } iq_cor_t;

  // One 36-bit calibration word: rotation angle in the upper half, gain
  // factor in the lower half.
  typedef struct packed {
    angle_t phase;
    gcoef_t gain;
  } lut_word_t;

  localparam int unsigned LUT_AW = $clog2(N_CH) + GAIN_W;  // {channel, gain}
  localparam int unsigned LUT_DEPTH = 1 << LUT_AW;         // 256 words x 36 bits = 9216 bits

  // pi and 2*pi in Q3.15: round(pi * 2^15), round(2 * pi * 2^15).
  localparam int signed PI_Q     = 102944;
  localparam int signed TWO_PI_Q = 205887;

  // Arctangent table for CORDIC: ATAN_Q29[i] = round(atan(2^-i) * 2^29).
  localparam int unsigned ATAN_N = 24;
  localparam logic [31:0] ATAN_Q29 [ATAN_N] = '{
    32'd421657428, 32'd248918915, 32'd131521918, 32'd66762579,
    32'd33510843,  32'd16771758,  32'd8387925,   32'd4194219,
    32'd2097141,   32'd1048575,   32'd524288,    32'd262144,
    32'd131072,    32'd65536,     32'd32768,     32'd16384,
    32'd8192,      32'd4096,      32'd2048,      32'd1024,
    32'd512,       32'd256,       32'd128,       32'd64
  };

  // atan(2^-i) in radians with FRAC fraction bits (FRAC <= 29), rounded.
  function automatic logic [31:0] atan_frac(input int unsigned i, input int unsigned frac);
    logic [32:0] v;
    if (frac >= 29) return ATAN_Q29[i];
    v = {1'b0, ATAN_Q29[i]} + (33'd1 << (28 - frac));
    return 32'(v >> (29 - frac));
  endfunction

  // pi/2 with FRAC fraction bits: round(pi/2 * 2^29) = 843314857.
  function automatic logic [31:0] half_pi_frac(input int unsigned frac);
    logic [32:0] v;
    v = 33'd843314857 + (33'd1 << (28 - frac));
    return 32'(v >> (29 - frac));
  endfunction

endpackage
