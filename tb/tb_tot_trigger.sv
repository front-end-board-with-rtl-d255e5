// tb_tot_trigger: random above/below-threshold patterns against a reference
// that counts, per PMT, the bins above threshold in the last WIN bins and
// fires when NFOLD PMTs reach OCC. Small window for a short run.
`timescale 1ns/1ps
module tb_tot_trigger;
  import feb_pkg::*;
  localparam int WIN = 20, OCC = 6, NFOLD = 2;
  logic clk = 0, rst_n = 0, sample_en = 0, trig;
  sample_t [N_PMT-1:0] hg, thr;
  int checks = 0, failures = 0, fired = 0;
  bit hist [N_PMT][$];
  logic prev_c = 0, exp_trig = 0;

  tot_trigger #(.WIN(WIN), .OCC(OCC), .NFOLD(NFOLD)) dut (.*);
  always #4 clk = ~clk;

  initial begin
    thr = '{default: sample_t'(60)};
    hg = '0;
    for (int p = 0; p < N_PMT; p++) repeat (WIN) hist[p].push_back(0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      int prob;
      @(negedge clk);
      checks++;
      if (trig !== exp_trig) begin
        failures++; if (failures < 5) $display("bin %0d: trig %b expected %b", i, trig, exp_trig);
      end
      if (trig) fired++;
      sample_en = ($urandom % 5) != 0;
      prob = (((i / 500) % 2) != 0) ? 40 : 15;   // quiet and busy periods
      for (int p = 0; p < 3; p++)
        hg[p] = (($urandom % 100) < prob) ? sample_t'(61 + $urandom % 50) : sample_t'(40 + $urandom % 21);
      exp_trig = 0;
      if (sample_en) begin
        int n, cnt;
        logic c;
        n = 0;
        for (int p = 0; p < 3; p++) begin
          hist[p].push_back(hg[p] > thr[p]);
          void'(hist[p].pop_front());
          cnt = 0;
          foreach (hist[p][j]) cnt += hist[p][j];
          if (cnt >= OCC) n++;
        end
        c = n >= NFOLD;
        exp_trig = c && !prev_c;
        prev_c = c;
      end
    end
    checks++;
    if (fired < 10) begin failures++; $display("too few triggers: %0d", fired); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
