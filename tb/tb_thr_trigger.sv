// tb_thr_trigger: random HG samples around per-PMT thresholds; the trigger
// must pulse exactly one clock after the first bin of every 3-fold
// coincidence, and never otherwise.
`timescale 1ns/1ps
module tb_thr_trigger;
  import feb_pkg::*;
  logic clk = 0, rst_n = 0, sample_en = 0, trig;
  sample_t [N_PMT-1:0] hg, thr;
  int checks = 0, failures = 0, fired = 0;
  logic prev_c = 0, exp_trig = 0;

  thr_trigger dut (.*);
  always #4 clk = ~clk;

  initial begin
    thr[0] = 100; thr[1] = 120; thr[2] = 90; hg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      // check the outcome of the previous bin
      checks++;
      if (trig !== exp_trig) begin
        failures++; if (failures < 5) $display("bin %0d: trig %b expected %b", i, trig, exp_trig);
      end
      if (trig) fired++;
      sample_en = ($urandom % 8) != 0;
      for (int p = 0; p < 3; p++) hg[p] = sample_t'(int'(thr[p]) - 6 + int'($urandom % 16));
      exp_trig = 0;
      if (sample_en) begin
        logic c;
        c = (hg[0] > thr[0]) && (hg[1] > thr[1]) && (hg[2] > thr[2]);
        exp_trig = c && !prev_c;
        prev_c = c;
      end
    end
    checks++;
    if (fired < 20) begin failures++; $display("too few triggers: %0d", fired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
