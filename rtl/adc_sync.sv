// adc_sync: brings the samples of one dual-channel ADC chip into the global
// sampling clock.
//
// Each dual ADC drives its own PLL, whose clock captures that chip's LVDS
// data. The captured samples pass through STAGES register stages clocked by
// that PLL clock and are then taken over by one register in the global FPGA
// clock. Following the paper, there are three such stages. Both clocks run at
// the sampling rate and are derived from the same reference, so the global
// register sees stable data. This relies on the PLL placing the stages'
// output well inside the global clock period; it is not a general
// asynchronous crossing.
//
// Interface: adc_clk/adc_data from the LVDS receivers (already deserialised to
// parallel words), clk/sync_data in the global domain.
// Timing: a sample appears on sync_data STAGES adc_clk edges plus one clk
// edge after it is presented on adc_data.
module adc_sync #(
  parameter int unsigned W      = 14,
  parameter int unsigned CH     = 2,
  parameter int unsigned STAGES = 3
) (
  input  logic                 adc_clk,
  input  logic [CH-1:0][W-1:0] adc_data,
  input  logic                 clk,
  output logic [CH-1:0][W-1:0] sync_data
);

  logic [CH-1:0][W-1:0] stage [STAGES];

  always_ff @(posedge adc_clk) begin
    stage[0] <= adc_data;
    for (int i = 1; i < STAGES; i++) stage[i] <= stage[i-1];
  end

  always_ff @(posedge clk) sync_data <= stage[STAGES-1];

endmodule
