// tb_event_readout: small event (PRE=16, POST=32, legacy window 4+8=12
// bins). A buffer model answers the reads one clock later. Each case puts a
// pulse in the legacy window, the near zone or the far zone, with extended
// handling on or off and both sending modes, and checks every output word,
// its position, transmission number, factor and last flag, the buffer
// release, and the clocks from event-ready to the first word.
`timescale 1ns/1ps
module tb_event_readout;
  import feb_pkg::*;
  localparam int PRE = 16, POST = 32, SPRE = 4, SPOST = 8, DEPTH = PRE + POST, TLEN = SPRE + SPOST;
  localparam int AW = $clog2(DEPTH);
  logic clk = 0, rst_n = 0;
  logic ext_en;
  xfer_mode_e xmode;
  sample_t [N_PMT-1:0] chk_thr;
  logic evt_ready = 0, rd_release, out_valid, out_ready = 0, out_last;
  logic [AW-1:0] rd_idx;
  bin_t rd_data, out_bin;
  logic [9:0] out_word;
  logic [1:0] out_seg, out_n_code;
  xfer_mode_e out_xmode;
  int checks = 0, failures = 0;
  bin_t mem [DEPTH];

  event_readout #(.PRE(PRE), .POST(POST), .SPRE(SPRE), .SPOST(SPOST)) dut (.*);
  always #4 clk = ~clk;
  always @(posedge clk) rd_data <= mem[rd_idx];

  task automatic fail(input string s);
    failures++; if (failures < 10) $display("FAIL %s", s);
  endtask

  task automatic run_case(input int pulse, input logic en, input xfer_mode_e xm);
    int n, start, nsum, nseg, cyc, exp_cyc, got;
    bin_t e;
    // fill the buffer
    for (int i = 0; i < DEPTH; i++)
      for (int c = 0; c < N_CH; c++)
        mem[i][c] = (c < 3) ? sample_t'($urandom % 900) : sample_t'($urandom % 6000);
    if (pulse >= 0) mem[pulse][$urandom % 3] = 2000 + 14'($urandom % 8000);
    n = 1;
    if (en && pulse >= 0) begin
      if (pulse < 8 || pulse >= 32) n = 4;
      else if (pulse < 12 || pulse >= 24) n = 2;
    end
    start = PRE - n * SPRE;
    nsum = (xm == XM_SUM) ? n : 1;
    nseg = (xm == XM_EXTENDED) ? n : 1;
    exp_cyc = (en ? DEPTH + 3 : 2) + nsum + 1;
    ext_en = en; xmode = xm;
    @(negedge clk); evt_ready = 1;
    cyc = 0;
    while (!out_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != exp_cyc) fail($sformatf("latency %0d expected %0d", cyc, exp_cyc));
    got = 0;
    for (int s = 0; s < nseg; s++) begin
      for (int w = 0; w < TLEN; w++) begin
        // random back-pressure
        out_ready = 0;
        while (!out_valid) @(negedge clk);
        repeat ($urandom % 3) @(negedge clk);
        for (int c = 0; c < N_CH; c++) begin
          int acc = 0;
          for (int j = 0; j < nsum; j++) acc += int'(mem[start + s * TLEN + w * nsum + j][c]);
          e[c] = (acc > 16383) ? 14'h3FFF : 14'(acc);
        end
        checks++;
        if (out_bin !== e || out_word != 10'(w) || out_seg != 2'(s) ||
            out_n_code != 2'($clog2(n)) || out_last != (s == nseg - 1 && w == TLEN - 1) ||
            out_xmode != xm)
          fail($sformatf("pulse %0d en %0d xm %0d seg %0d word %0d: got %h/%0d/%0d/%0d exp %h",
                         pulse, en, xm, s, w, out_bin, out_word, out_seg, out_n_code, e));
        out_ready = 1;
        @(negedge clk);
        out_ready = 0;
        got++;
      end
    end
    // release follows, and nothing more is sent
    cyc = 0;
    while (!rd_release && cyc < 5) begin cyc++; @(negedge clk); end
    checks++;
    if (!rd_release) fail("no release");
    evt_ready = 0;
    @(negedge clk);
    checks++;
    if (out_valid) fail("output after release");
  endtask

  initial begin
    chk_thr = '{default: sample_t'(1000)};
    ext_en = 0; xmode = XM_SUM;
    repeat (3) @(posedge clk); rst_n = 1;
    begin
      automatic int pos [7] = '{-1, 12, 23, 8, 31, 0, 47};
      for (int k = 0; k < 7; k++) begin
        run_case(pos[k], 1'b1, XM_SUM);
        run_case(pos[k], 1'b1, XM_EXTENDED);
        run_case(pos[k], 1'b0, XM_EXTENDED);
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
