// tb_feb_top: end-to-end run of the whole board logic at its default sizes
// (1024+2048-bin buffers, 768-bin transmissions, 120 MHz sampling).
//
// The test bench generates the six SD ADC waveforms itself (pedestal, small
// noise, and injected pulses), feeds them through the four PLL-clock domains,
// and reads every event back through the 32-bit DMA port with a Unified Board
// bus model (40 MHz, one wait state). Each event's words are compared with a
// reference built from the generated samples: the trigger bin is the first
// bin that satisfies the trigger rule, and the transmission covers
// [1024 - 256*N, 1024 + 512*N) of the buffer around it.
//   E0  Thr pulse before the buffer is armed        -> lost
//   E1  Thr pulse, saturating HG                     -> N=1, LG {LG,HG} format
//   E2  ToT signal + far pulse, extended mode        -> N=4, 4 transmissions
//   E3  external (DCT) trigger + near pulse, summed  -> N=2, LG shifted, 12-bit
//   E4a, E4b while the reader is paused              -> both buffers full, stall
//   E4c during the stall                             -> lost
// Meanwhile the CPLD loader reloads a configuration file from slot 3.
// Every mechanism is counted; one that never happens is a failure.
`timescale 1ns/1ps
module tb_feb_top;
  import feb_pkg::*;
  localparam int NS = 180000;

  logic clk = 0, rst_n = 0;
  logic [3:0] adc_clk = '0;
  bin_t adc_sd, sd_data;
  logic [1:0][AUX_W-1:0] adc_aux, aux_data;
  logic dct_trig = 0;
  logic [2:0] trig_en;
  sample_t [N_PMT-1:0] thr_thr, tot_thr, chk_thr;
  logic ext_en, adc12, diag_en, stalled;
  xfer_mode_e xmode;
  lg_fmt_e lg_fmt;
  logic [2:0] lg_shift;
  logic [15:0] lost_cnt;
  logic [19:0] event_cnt;
  logic ub_cs_n = 1, ub_rd_n = 1, ub_irq;
  logic [31:0] ub_data;
  logic mclk = 0, mrst_n = 0, cfg_cmd_valid = 0, cfg_busy, cfg_done, cfg_error;
  logic [2:0] cfg_cmd_slot = 3'd3;
  logic mem_req, mem_ack = 0, ps_nconfig, ps_nstatus = 0, ps_conf_done, ps_dclk, ps_data0;
  logic [26:0] mem_addr;
  logic [7:0] mem_rdata = 0;

  feb_top dut (.*);

  int checks = 0, failures = 0;
  task automatic fail(input string s);
    failures++; if (failures < 15) $display("FAIL %s at %0t", s, $time);
  endtask

  // ------------------------------------------------------------ clocks
  always #4.1667 clk = ~clk;
  initial begin #2; forever #4.1667 adc_clk = ~adc_clk; end
  always #12.5 mclk = ~mclk;

  // ------------------------------------------------------------ waveform
  logic [13:0] wave [NS][6];
  int n = 0;   // sample being presented

  function automatic int noise(input int i, input int c);
    return ((i * 73 + c * 151) ^ (i >> 3)) % 6;
  endfunction

  task automatic pulse(input int t, input int amp, input int pmt_mask);
    for (int k = 0; k < 10; k++)
      for (int p = 0; p < 3; p++)
        if (pmt_mask[p]) begin
          wave[t + k][p]     = 14'(50 + (amp >> k));
          wave[t + k][3 + p] = 14'(50 + ((amp >> k) / 32));
        end
  endtask

  localparam int T_E0 = 500, T_E1 = 3000, T_E2 = 30000, T_E3 = 100000;
  localparam int T_E4A = 125000, T_E4B = 129000, T_E4C = 132000, T_RESUME = 133000;

  initial begin
    for (int i = 0; i < NS; i++)
      for (int c = 0; c < 6; c++) wave[i][c] = 14'(50 + noise(i, c));
    pulse(T_E0, 800, 7);
    pulse(T_E1, 3000, 7);
    // E2: two PMTs at 150 for 60 bins (ToT), far pulse on PMT 3 alone
    for (int k = 0; k < 60; k++) begin wave[T_E2 + k][0] = 150; wave[T_E2 + k][1] = 150; end
    pulse(T_E2 + 38 - 900, 700, 4);
    // E3: marker 777 for the external trigger, near pulse on PMT 2
    wave[T_E3][0] = 777;
    pulse(T_E3 + 600, 650, 2);
    pulse(T_E4A, 800, 7);
    pulse(T_E4B, 900, 7);
    pulse(T_E4C, 900, 7);
  end

  always @(negedge adc_clk[0]) begin
    if (n < NS - 1) n <= n + 1;
  end
  always_comb begin
    for (int c = 0; c < 6; c++) adc_sd[c] = wave[n][c];
    adc_aux[0] = 12'(n);
    adc_aux[1] = 12'(n * 3);
  end

  // external DCT trigger model: decides one clock after the bin, like the
  // internal triggers
  always @(posedge clk) begin
    if (sd_data[0] == 777) begin
      #1 dct_trig = 1;
      @(posedge clk); #1 dct_trig = 0;
    end
  end

  // ------------------------------------------------------------ mechanisms
  int m_stall = 0, m_sat = 0, m_n1 = 0, m_n2 = 0, m_n4 = 0, m_thr = 0, m_tot = 0, m_dct = 0;
  int m_lgmsb = 0, m_lgsh = 0, m_adc12 = 0, m_diag = 0, m_cfg = 0;
  always @(posedge clk) if (rst_n && stalled && !$past(stalled)) m_stall++;

  // ------------------------------------------------------------ UB reader
  bit reader_on = 0;
  word_t rx [$];
  logic  rx_last [$];

  task automatic ub_read(output logic [31:0] d);
    ub_cs_n = 0; ub_rd_n = 0;
    #50 d = ub_data;
    ub_rd_n = 1; ub_cs_n = 1;
    #40;
  endtask

  task automatic read_event();
    logic [31:0] d0, d1;
    word_t w;
    rx.delete();
    wait (reader_on && ub_irq);
    do begin
      ub_read(d0);
      ub_read(d1);
      w[0] = d0[9:0];  w[1] = d0[19:10]; w[2] = d0[29:20];
      w[3] = d1[9:0];  w[4] = d1[19:10]; w[5] = d1[29:20];
      rx.push_back(w);
      checks++;
      if (rx.size() == 1 && !d0[31]) fail("first-of-event flag missing");
    end while (!d1[31] && rx.size() < 4 * TRACE_LEN + 1);
  endtask

  // ------------------------------------------------------------ reference
  function automatic word_t fmt(input bin_t b, input lg_fmt_e lf, input int sh, input bit a12);
    word_t w;
    for (int c = 0; c < 6; c++) if (a12) b[c] = {b[c][13:2], 2'b00};
    for (int p = 0; p < 3; p++) begin
      int v;
      w[p] = (b[p] > 1023) ? 10'h3FF : b[p][9:0];
      if (lf == LG_HGMSB) w[3 + p] = {b[3 + p][13:8], b[p][13:10]};
      else begin
        v = int'(b[3 + p]) >> sh;
        w[3 + p] = (v > 1023) ? 10'h3FF : 10'(v);
      end
    end
    return w;
  endfunction

  task automatic check_event(input string name, input int t_trig, input int n_f, input xfer_mode_e xm,
                             input lg_fmt_e lf, input int sh, input bit a12, input int src, input int evno);
    int nseg, nsum, start, bad;
    nseg = (xm == XM_EXTENDED) ? n_f : 1;
    nsum = (xm == XM_SUM) ? n_f : 1;
    start = t_trig - 256 * n_f;
    read_event();
    checks++;
    if (rx.size() != nseg * TRACE_LEN) begin
      fail($sformatf("%s: %0d words, expected %0d", name, rx.size(), nseg * TRACE_LEN));
      return;
    end
    bad = 0;
    for (int s = 0; s < nseg; s++)
      for (int w = 0; w < TRACE_LEN; w++) begin
        word_t got;
        got = rx[s * TRACE_LEN + w];
        if (w < TRACE_LEN - DIAG_WORDS) begin
          bin_t b;
          word_t e;
          for (int c = 0; c < 6; c++) begin
            int acc = 0;
            for (int j = 0; j < nsum; j++) acc += int'(wave[start + s * TRACE_LEN + w * nsum + j][c]);
            b[c] = (acc > 16383) ? 14'h3FFF : 14'(acc);
          end
          e = fmt(b, lf, sh, a12);
          checks++;
          if (got !== e) begin
            bad++;
            if (bad < 4) fail($sformatf("%s seg %0d word %0d: %h expected %h", name, s, w, got, e));
          end
          for (int p = 0; p < 3; p++) if (got[p] == 10'h3FF) m_sat++;
        end else if (w == TRACE_LEN - DIAG_WORDS) begin
          checks++;
          if (got[5] !== 10'h2A5 || got[0] !== 10'(evno) || got[2][9:7] !== 3'(src) ||
              got[2][3:2] !== 2'(s))
            fail($sformatf("%s seg %0d: diagnostic header %h", name, s, got));
          else m_diag++;
        end
      end
    if (n_f == 1) m_n1++;
    if (n_f == 2) m_n2++;
    if (n_f == 4) m_n4++;
    if (src[0]) m_thr++;
    if (src[1]) m_tot++;
    if (src[2]) m_dct++;
    if (lf == LG_HGMSB) m_lgmsb++; else m_lgsh++;
    if (a12) m_adc12++;
    $display("%s: %0d words checked, %0d bad", name, rx.size(), bad);
  endtask

  // ------------------------------------------------------------ CPLD side
  int ps_bytes = 0, ps_bits = 0;
  assign ps_conf_done = ps_bytes >= 64;
  logic [7:0] ps_sh;
  always @(posedge mclk) begin
    mem_ack <= 0;
    if (mem_req && !mem_ack) begin
      mem_ack   <= 1;
      mem_rdata <= 8'(32'(mem_addr) * 13 + (32'(mem_addr) >> 24));
    end
  end
  always @(posedge mclk) begin
    if (!ps_nconfig) begin ps_nstatus <= 0; ps_bytes = 0; ps_bits = 0; end
    else ps_nstatus <= 1;
  end
  always @(posedge ps_dclk) if (!ps_conf_done) begin
    ps_sh = {ps_data0, ps_sh[7:1]};
    if (++ps_bits == 8) begin
      logic [26:0] a;
      a = {3'd3, 24'(ps_bytes)};
      ps_bits = 0;
      checks++;
      if (ps_sh !== 8'(32'(a) * 13 + (32'(a) >> 24))) fail($sformatf("config byte %0d wrong", ps_bytes));
      ps_bytes++;
    end
  end
  initial begin
    repeat (5) @(posedge mclk); mrst_n = 1;
    repeat (5) @(posedge mclk);
    @(negedge mclk) cfg_cmd_valid = 1;
    @(negedge mclk) cfg_cmd_valid = 0;
    wait (cfg_done || cfg_error);
    checks++;
    if (!cfg_done || ps_bytes < 64) fail("configuration load failed");
    else m_cfg++;
  end

  // ------------------------------------------------------------ sequence
  initial begin
    trig_en = 3'b111;
    thr_thr = '{default: sample_t'(500)};
    tot_thr = '{default: sample_t'(100)};
    chk_thr = '{default: sample_t'(400)};
    ext_en = 1; xmode = XM_EXTENDED; lg_fmt = LG_HGMSB; lg_shift = 0; adc12 = 0; diag_en = 1;
    repeat (5) @(posedge clk); rst_n = 1;
    reader_on = 1;
    check_event("E1", T_E1, 1, XM_EXTENDED, LG_HGMSB, 0, 0, 1, 0);
    checks++; if (lost_cnt != 1) fail($sformatf("E0 not counted as lost (%0d)", lost_cnt));
    check_event("E2", T_E2 + 38, 4, XM_EXTENDED, LG_HGMSB, 0, 0, 2, 1);
    wait (n > T_E3 - 5000);
    xmode = XM_SUM; lg_fmt = LG_SHIFTED; lg_shift = 2; adc12 = 1;
    check_event("E3", T_E3, 2, XM_SUM, LG_SHIFTED, 2, 1, 4, 2);
    wait (n > T_E4A - 5000);
    xmode = XM_EXTENDED; lg_fmt = LG_HGMSB; lg_shift = 0; adc12 = 0;
    reader_on = 0;
    wait (n > T_RESUME);
    reader_on = 1;
    check_event("E4a", T_E4A, 1, XM_EXTENDED, LG_HGMSB, 0, 0, 1, 3);
    check_event("E4b", T_E4B, 1, XM_EXTENDED, LG_HGMSB, 0, 0, 1, 4);
    checks++; if (lost_cnt != 2) fail($sformatf("lost triggers %0d, expected 2", lost_cnt));
    checks++; if (event_cnt != 5) fail($sformatf("event count %0d, expected 5", event_cnt));
    // mechanisms
    begin
      int m [13];
      string nm [13];
      m = '{m_thr, m_tot, m_dct, m_n1, m_n2, m_n4, m_stall, m_sat, m_lgmsb, m_lgsh, m_adc12, m_diag, m_cfg};
      nm = '{"thr", "tot", "dct", "N=1", "N=2 sum", "N=4 extended", "stall", "HG saturation",
                         "LG {LG,HG}", "LG shifted", "12-bit", "diagnostic", "config load"};
      for (int i = 0; i < 13; i++) begin
        checks++;
        $display("mechanism %-14s happened %0d times", nm[i], m[i]);
        if (m[i] == 0) fail($sformatf("mechanism %s never happened", nm[i]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog: stopped at sample %0d", n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
