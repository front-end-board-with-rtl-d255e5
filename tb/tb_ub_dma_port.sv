// tb_ub_dma_port: a Unified Board bus model reads, at 40 MHz with one wait
// state (strobe low 50 ns, sampled at its end, then high at least 25 ns),
// from the port clocked at 120 MHz. Three events of two transmissions are
// sent; every half-word, its flag bits and the interrupt are checked, and
// the new half-word must appear within 4 sampling clocks of the strobe's end.
`timescale 1ns/1ps
module tb_ub_dma_port;
  import feb_pkg::*;
  localparam int TLEN = 20;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_last = 0;
  word_t in_word;
  logic [9:0] in_pos;
  logic ub_cs_n = 1, ub_rd_n = 1, ub_irq;
  logic [31:0] ub_data;
  int checks = 0, failures = 0;
  word_t sent [$];
  logic  sent_last [$];
  logic  sent_first [$];
  logic [9:0] sent_pos [$];

  ub_dma_port #(.TLEN(TLEN)) dut (.*);
  always #4.1667 clk = ~clk;

  task automatic fail(input string s);
    failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time);
  endtask

  // producer
  initial begin
    in_word = '0; in_pos = '0;
    @(posedge rst_n);
    for (int ev = 0; ev < 3; ev++)
      for (int s = 0; s < 2; s++)
        for (int p = 0; p < TLEN; p++) begin
          @(negedge clk);
          for (int c = 0; c < N_CH; c++) in_word[c] = 10'($urandom);
          in_pos = 10'(p);
          in_last = (s == 1 && p == TLEN - 1);
          in_valid = 1;
          sent.push_back(in_word); sent_last.push_back(in_last);
          sent_first.push_back(s == 0 && p == 0); sent_pos.push_back(in_pos);
          do @(posedge clk); while (!in_ready);
          @(negedge clk) in_valid = 0;
          repeat ($urandom % 4) @(negedge clk);
        end
  end

  // UB reader
  initial begin
    int nbins;
    repeat (5) @(posedge clk);
    rst_n = 1;
    nbins = 3 * 2 * TLEN;
    for (int b = 0; b < nbins; b++) begin
      logic [31:0] exp0, exp1, d0, d1;
      word_t w;
      if (sent_first.size() == 0 || b == 0) wait (sent.size() > b);
      // wait for the data to be there, as the UB does after an interrupt
      #80;
      w = sent[b];
      exp0 = {sent_first[b], sent_pos[b] == 0, w[2], w[1], w[0]};
      exp1 = {sent_last[b], sent_pos[b] == 10'(TLEN - 1), w[5], w[4], w[3]};
      checks++;
      if (ub_irq !== sent_first[b]) fail($sformatf("irq %b at bin %0d", ub_irq, b));
      for (int h = 0; h < 2; h++) begin
        int t0, lat;
        ub_cs_n = 0; ub_rd_n = 0;
        #50;
        if (h == 0) d0 = ub_data; else d1 = ub_data;
        ub_rd_n = 1; ub_cs_n = 1;
        // latency of the next half-word (only when it differs)
        t0 = 0;
        lat = -1;
        for (int k = 1; k <= 6; k++) begin
          @(posedge clk); #0.1;
          if (lat < 0 && ub_data !== (h == 0 ? d0 : d1)) lat = k;
        end
        if (h == 0) begin
          checks++;
          if (lat < 0 || lat > 4) fail($sformatf("half-word change took %0d clocks", lat));
        end
        #25;
      end
      checks += 2;
      if (d0 !== exp0) fail($sformatf("bin %0d read 0: %h expected %h", b, d0, exp0));
      if (d1 !== exp1) fail($sformatf("bin %0d read 1: %h expected %h", b, d1, exp1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
