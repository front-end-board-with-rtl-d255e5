// data_formatter: packs one time bin of six 14-bit samples into the legacy
// format of six 10-bit words, so the station controller and the rest of the
// data chain keep working unchanged.
//
// HG channels: the 10 least significant bits of the 14-bit value are sent; a
// value above 1023 is sent as 3FF so that saturation stays visible.
// LG channels, two variants (paper, both listed):
//   LG_HGMSB   : {LG[13:8], HG[13:10]} - the 4 high bits of the HG sample on
//                the 4 low bits, the 6 most significant LG bits above them.
//                Together with the HG word this gives the full HG value and
//                a coarse LG value for strong signals.
//   LG_SHIFTED : the LG value shifted right by lg_shift (0..4), saturated to
//                3FF, so that small signals are sent without leading zeros.
// adc12 clears the two LSBs of every input first, emulating 12-bit ADCs.
// The choice of a per-event shift input for the second variant, and the
// 12-bit masking at this point of the chain, are this design's own.
//
// Purely combinational.
module data_formatter
  import feb_pkg::*;
(
  input  bin_t        bin_in,
  input  lg_fmt_e     lg_fmt,
  input  logic [2:0]  lg_shift,
  input  logic        adc12,
  output word_t       word_out,
  output logic [N_PMT-1:0] hg_sat
);

  always_comb begin
    bin_t        b;
    logic [2:0]  sh;
    sample_t     lg_sh;
    lg_sh = '0;
    sh = (lg_shift > 3'd4) ? 3'd4 : lg_shift;
    for (int c = 0; c < N_CH; c++)
      b[c] = adc12 ? {bin_in[c][ADC_W-1:2], 2'b00} : bin_in[c];
    for (int p = 0; p < N_PMT; p++) begin
      hg_sat[p]      = (b[p] > sample_t'(1023));
      word_out[p]    = hg_sat[p] ? 10'h3FF : b[p][9:0];
      if (lg_fmt == LG_HGMSB) begin
        word_out[N_PMT+p] = {b[N_PMT+p][13:8], b[p][13:10]};
      end else begin
        lg_sh = b[N_PMT+p] >> sh;
        word_out[N_PMT+p] = (lg_sh > sample_t'(1023)) ? 10'h3FF : lg_sh[9:0];
      end
    end
  end

endmodule
