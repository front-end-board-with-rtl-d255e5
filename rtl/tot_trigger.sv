// tot_trigger: the time-over-threshold (ToT) first-level trigger, meant for
// small signals spread out in time.
//
// The paper names this trigger and its purpose but not its rule. This module
// uses the usual form of the surface-detector ToT: for each HG channel, count
// the bins above a low threshold within a sliding window of WIN bins; the
// trigger fires when at least NFOLD PMTs reach OCC such bins. The defaults
// (window 3 us, 13 bins at 40 MHz, 2 of 3 PMTs) are scaled to 120 MHz
// sampling: WIN = 360, OCC = 39. They are this design's assumptions.
//
// Each channel keeps a WIN-bit shift register of its comparator output and a
// running count (add the newest bit, subtract the one leaving the window).
// Interface: sample_en marks a valid bin; trig pulses for one clock when the
// condition becomes true. Latency: one clock after the bin that completes it.
module tot_trigger
  import feb_pkg::*;
#(
  parameter int unsigned WIN   = 360,
  parameter int unsigned OCC   = 39,
  parameter int unsigned NFOLD = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  sample_en,
  input  sample_t [N_PMT-1:0]   hg,
  input  sample_t [N_PMT-1:0]   thr,
  output logic                  trig
);

  localparam int unsigned CW = $clog2(WIN + 1);

  logic [N_PMT-1:0][WIN-1:0] hist;
  logic [N_PMT-1:0][CW-1:0]  cnt;
  logic                      cond_q;
  logic [N_PMT-1:0]          above;
  logic [N_PMT-1:0][CW-1:0]  cnt_nx;
  logic                      cond;

  always_comb begin
    int unsigned n;
    n = 0;
    for (int p = 0; p < N_PMT; p++) begin
      above[p]  = hg[p] > thr[p];
      cnt_nx[p] = cnt[p] + CW'(above[p]) - CW'(hist[p][WIN-1]);
      if (cnt_nx[p] >= CW'(OCC)) n++;
    end
    cond = (n >= NFOLD);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hist   <= '0;
      cnt    <= '0;
      cond_q <= 1'b0;
      trig   <= 1'b0;
    end else begin
      trig <= 1'b0;
      if (sample_en) begin
        for (int p = 0; p < N_PMT; p++) begin
          hist[p] <= {hist[p][WIN-2:0], above[p]};
          cnt[p]  <= cnt_nx[p];
        end
        cond_q <= cond;
        trig   <= cond & ~cond_q;
      end
    end
  end

endmodule
