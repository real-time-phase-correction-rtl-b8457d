// correction_lut: calibration memory for the per-channel correction.
//
// One 256 x 36-bit block RAM (9216 bits) holds, for each channel and each
// gain setting, an 18-bit rotation angle (radians, Q3.15, counter-clockwise
// positive; it is minus the channel delay measured at that gain) and an
// 18-bit gain-correction factor (unsigned Q2.16). The word size and the
// 9216-bit total follow the design; the address split {channel[1:0],
// gain[5:0]} (4 channels x 64 settings, covering 0..60 dB in 1 dB steps)
// and the number formats are this implementation's choice.
//
// All four channels run at one common gain setting, so the read side cycles
// through the four channels at the current gain, one read per clock, and
// keeps each channel's two words in holding registers that feed the
// datapath. coef_valid rises once all four have been read since the gain (or
// the memory) last changed: at most 5 clocks after a change.
//
// Write port: wr_en/wr_addr/wr_data load calibration from a host; the memory
// itself is not reset and must be loaded before use.
module correction_lut
  import bppm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  gain_t             gain,
  input  logic              wr_en,
  input  logic [LUT_AW-1:0] wr_addr,
  input  lut_word_t         wr_data,
  output angle_t            phase_coef [N_CH],
  output gcoef_t            gain_coef  [N_CH],
  output logic              coef_valid
);

  localparam int unsigned CH_W = $clog2(N_CH);

  lut_word_t mem [LUT_DEPTH];

  logic [CH_W-1:0] rd_ch, rd_ch_q;
  gain_t           rd_gain_q;
  lut_word_t       rd_data;
  logic            rd_fresh_q;   // no write since this read was issued
  logic [N_CH-1:0] loaded;

  // Block RAM: synchronous write, synchronous read.
  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    rd_data <= mem[{rd_ch, gain}];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ch      <= '0;
      rd_ch_q    <= '0;
      rd_gain_q  <= '0;
      rd_fresh_q <= 1'b0;
      loaded     <= '0;
      for (int c = 0; c < N_CH; c++) begin
        phase_coef[c] <= '0;
        gain_coef[c]  <= '0;
      end
    end else begin
      rd_ch      <= rd_ch + 1'b1;
      rd_ch_q    <= rd_ch;
      rd_gain_q  <= gain;
      rd_fresh_q <= !wr_en;
      // The word read last clock is stored only if it still belongs to the
      // current gain and no write could have made it stale.
      if (rd_gain_q == gain && rd_fresh_q && !wr_en) begin
        phase_coef[rd_ch_q] <= rd_data.phase;
        gain_coef[rd_ch_q]  <= rd_data.gain;
      end
      if (rd_gain_q != gain || wr_en || !rd_fresh_q)
        loaded <= '0;
      else
        loaded[rd_ch_q] <= 1'b1;
    end
  end

  assign coef_valid = &loaded;

endmodule
