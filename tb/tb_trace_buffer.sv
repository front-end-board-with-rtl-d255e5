// tb_trace_buffer: small buffers (PRE=16, POST=32). Each written bin carries
// its own sequence number, so every read-back bin can be checked: index i of
// an event must hold trigger_number - PRE + i. A directed part checks the
// arming rule, the switch to the second buffer, the stall when both are full
// and the lost triggers; a random part runs triggers, write gaps and slow
// readout against the same rule.
`timescale 1ns/1ps
module tb_trace_buffer;
  localparam int PRE = 16, POST = 32, DEPTH = PRE + POST, W = 32, AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, trig = 0;
  logic [W-1:0] wr_data = 0;
  logic trig_acc, acc_bank, trig_lost, stalled, evt_ready, rd_bank, rd_release = 0;
  logic [AW-1:0] rd_idx = 0;
  logic [W-1:0] rd_data;
  int checks = 0, failures = 0;
  int accepted = 0, lost = 0, stalls = 0, events_read = 0;
  int exp_q [$];
  logic [W-1:0] last_trig_val;
  bit reader_on = 0;

  trace_buffer #(.PRE(PRE), .POST(POST), .W(W)) dut (.*);
  always #4 clk = ~clk;

  task automatic fail(input string s);
    failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time);
  endtask

  // writer bookkeeping: record triggers as the DUT reports them
  always @(posedge clk) if (rst_n) begin
    if (trig_acc) begin accepted++; exp_q.push_back(int'(last_trig_val)); end
    if (trig_lost) lost++;
    if (stalled && !$past(stalled)) stalls++;
    if (trig && wr_en) last_trig_val <= wr_data;
  end

  // reader: reads a whole event, checks it, releases
  initial begin
    forever begin
      @(negedge clk);
      if (reader_on && evt_ready) begin
        int base;
        checks++;
        if (exp_q.size() == 0) begin fail("event without accepted trigger"); base = 0; end
        else base = exp_q.pop_front() - PRE;
        for (int i = 0; i < DEPTH; i++) begin
          rd_idx = AW'(i);
          @(negedge clk);
          checks++;
          if (int'(rd_data) != base + i)
            fail($sformatf("bin %0d: %0d expected %0d", i, rd_data, base + i));
        end
        rd_release = 1;
        @(negedge clk);
        rd_release = 0;
        events_read++;
        repeat ($urandom % 100) @(negedge clk);
      end
    end
  end

  task automatic write_n(input int n, input int trig_at = -1);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_en = 1;
      wr_data = wr_data + 1;
      trig = (i == trig_at);
    end
    @(negedge clk); trig = 0; wr_en = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    // trigger before 16 samples are in: lost
    write_n(10, 5);
    checks++; if (lost != 1 || accepted != 0) fail("unarmed trigger not lost");
    // accepted into buffer 0, then 31 more bins fill it
    write_n(40, 20);
    checks++; if (accepted != 1) fail("trigger not accepted");
    write_n(40);
    checks++; if (!evt_ready || rd_bank != 0) fail("buffer 0 not full");
    // buffer 1 takes the next event, then both are full
    write_n(60, 25);
    checks++; if (accepted != 2 || !stalled) fail("no stall with both buffers full");
    write_n(10, 3);
    checks++; if (lost != 2) fail("trigger during stall not lost");
    // reader drains both
    reader_on = 1;
    wait (events_read == 2);
    checks++; if (stalled) fail("still stalled after release");
    // random phase
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      wr_en = ($urandom % 4) != 0;
      if (wr_en) wr_data = wr_data + 1;
      trig = ($urandom % 60) == 0;
    end
    @(negedge clk); wr_en = 0; trig = 0;
    repeat (400) @(negedge clk);
    checks++;
    if (accepted < 50 || lost < 5 || stalls < 3 || events_read + 2 < accepted) begin
      fail($sformatf("coverage: accepted %0d lost %0d stalls %0d read %0d", accepted, lost, stalls, events_read));
    end
    $display("accepted %0d lost %0d stalls %0d read %0d", accepted, lost, stalls, events_read);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
