// tb_window_check: scans of a 3072-bin event with one pulse placed in each
// zone (legacy window, near, far, none); checks the flags and the zone
// limits 512/768/1536/2048 exactly.
`timescale 1ns/1ps
module tb_window_check;
  import feb_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [11:0] idx;
  sample_t [N_PMT-1:0] hg, thr;
  logic near_sig, far_sig;
  int checks = 0, failures = 0;

  window_check dut (.*);
  always #4 clk = ~clk;

  task automatic scan(input int pos, input int ch);
    @(negedge clk); clear = 1; valid = 0;
    @(negedge clk); clear = 0;
    for (int i = 0; i < 3072; i++) begin
      valid = 1; idx = 12'(i);
      hg = '{default: sample_t'(50)};
      if (i == pos) hg[ch] = 200;
      @(negedge clk);
    end
    valid = 0;
    @(negedge clk);
  endtask

  task automatic expect_flags(input int pos, input logic en, input logic ef);
    checks++;
    if (near_sig !== en || far_sig !== ef) begin
      failures++;
      $display("pulse at %0d: near %b far %b, expected %b %b", pos, near_sig, far_sig, en, ef);
    end
  endtask

  initial begin
    thr = '{default: sample_t'(100)};
    hg = '0; idx = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    begin
      automatic int pos [12] = '{-1, 768, 1000, 1535, 767, 512, 1536, 2047, 511, 2048, 0, 3071};
      automatic logic en [12] = '{0, 0, 0, 0, 1, 1, 1, 1, 0, 0, 0, 0};
      automatic logic ef [12] = '{0, 0, 0, 0, 0, 0, 0, 0, 1, 1, 1, 1};
      for (int k = 0; k < 12; k++) begin
        scan(pos[k], k % 3);
        expect_flags(pos[k], en[k], ef[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
