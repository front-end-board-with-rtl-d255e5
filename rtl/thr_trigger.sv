// thr_trigger: the threshold (Thr) first-level trigger.
//
// Only the high-gain channels take part. In each time bin every HG sample is
// compared with its own threshold; the trigger fires when all three PMTs are
// above threshold in the same bin (3-fold coincidence). The paper sets the
// threshold at 1.75 I_peak^VEM, the peak current of a vertical muon, which is
// a calibration value: the thresholds are therefore run-time inputs, given in
// ADC counts including the pedestal. A per-PMT threshold and the strict
// "greater than" comparison are this design's choices.
//
// Interface: sample_en marks a valid bin on hg; trig is a one-cycle pulse on
// the first bin of a coincidence (a coincidence that lasts several bins gives
// one trigger). Latency: trig is registered, one clock after the bin.
module thr_trigger
  import feb_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sample_en,
  input  sample_t [N_PMT-1:0]   hg,
  input  sample_t [N_PMT-1:0]   thr,
  output logic                  trig
);

  logic coinc, coinc_q;

  always_comb begin
    coinc = 1'b1;
    for (int p = 0; p < N_PMT; p++) coinc &= (hg[p] > thr[p]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coinc_q <= 1'b0;
      trig    <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (sample_en) begin
        coinc_q <= coinc;
        trig    <= coinc & ~coinc_q;
      end
    end
  end

endmodule
