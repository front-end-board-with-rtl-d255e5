// window_check: looks for signal outside the legacy 768-bin window of an
// event held in a buffer of PRE + POST bins.
//
// The legacy window is [PRE-STD_PRE, PRE+STD_POST), i.e. bins 768..1535 of
// the 3072-bin buffer; the paper checks the rest, [0..768) and [1536..3072).
// This module splits that rest in two so the readout can choose how much of
// the buffer to send:
//   near_sig : [PRE-2*STD_PRE, PRE+2*STD_POST) outside the legacy window
//          (512..767 and 1536..2047), covered when 2x the window is sent;
//   far_sig  : everything else (0..511 and 2048..3071), needing 4x.
// A bin counts as signal when any HG sample is above its threshold. The
// split and this criterion are this design's choices; the paper does not say
// what makes a contribution "significant".
//
// Interface: clear resets both flags; each clock with valid, the bin at
// position idx is examined. near_sig/far_sig are sticky and registered (one clock).
module window_check
  import feb_pkg::*;
#(
  parameter int unsigned PRE      = BUF_PRE,
  parameter int unsigned POST     = BUF_POST,
  parameter int unsigned SPRE     = STD_PRE,
  parameter int unsigned SPOST    = STD_POST,
  localparam int unsigned AW      = $clog2(PRE + POST)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                valid,
  input  logic [AW-1:0]       idx,
  input  sample_t [N_PMT-1:0] hg,
  input  sample_t [N_PMT-1:0] thr,
  output logic                near_sig,
  output logic                far_sig
);

  localparam int unsigned STD_LO  = PRE - SPRE;
  localparam int unsigned STD_HI  = PRE + SPOST;
  localparam int unsigned NEAR_LO = (PRE > 2*SPRE) ? PRE - 2*SPRE : 0;
  localparam int unsigned NEAR_HI = PRE + 2*SPOST;

  logic sig, in_std, in_near;

  always_comb begin
    sig = 1'b0;
    for (int p = 0; p < N_PMT; p++) sig |= hg[p] > thr[p];
    in_std  = (idx >= AW'(STD_LO))  && (idx < AW'(STD_HI));
    in_near = (idx >= AW'(NEAR_LO)) && (32'(idx) < NEAR_HI);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      near_sig <= 1'b0;
      far_sig  <= 1'b0;
    end else if (clear) begin
      near_sig <= 1'b0;
      far_sig  <= 1'b0;
    end else if (valid && sig && !in_std) begin
      if (in_near) near_sig <= 1'b1;
      else         far_sig  <= 1'b1;
    end
  end

endmodule
