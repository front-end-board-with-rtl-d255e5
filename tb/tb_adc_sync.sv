// tb_adc_sync: checks that each sample crosses from the ADC PLL clock to the
// global clock intact and with the expected latency (three PLL-clock stages,
// then the global register), with the global clock 3 ns behind.
`timescale 1ns/1ps
module tb_adc_sync;
  localparam int W = 14, CH = 2;
  logic adc_clk = 0, clk = 0;
  logic [CH-1:0][W-1:0] adc_data, sync_data;
  int checks = 0, failures = 0;
  logic [CH-1:0][W-1:0] cap [$];

  adc_sync #(.W(W), .CH(CH), .STAGES(3)) dut (.*);

  always #4 adc_clk = ~adc_clk;
  initial begin #3; forever #4 clk = ~clk; end

  // new data after each ADC edge; record what each edge captured
  always @(posedge adc_clk) begin
    cap.push_back(adc_data);
    #1 adc_data = {CH{W'($urandom)}};
  end

  int n = 0;
  always @(negedge clk) begin
    n++;
    // after global edge n the output holds the sample of ADC edge n-3 (0-based)
    if (n > 4 && cap.size() >= 4) begin
      checks++;
      if (sync_data !== cap[cap.size()-3]) begin
        failures++;
        if (failures < 5) $display("mismatch at %0d: %h vs %h", n, sync_data, cap[cap.size()-3]);
      end
    end
    if (n == 300) begin
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin adc_data = '0; end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
