// feb_top: trigger and memory circuitry of the front-end board, together with
// the configuration logic of its CPLD.
//
// Data path (sampling clock clk, 120 MHz nominal):
//   four adc_sync  - one per dual ADC chip, each on its own PLL clock: chips
//                    0..2 carry the six 14-bit SD channels (HG1..3, LG1..3),
//                    chip 3 the two 12-bit auxiliary channels;
//   thr_trigger    - 3-fold HG threshold trigger;
//   tot_trigger    - time-over-threshold trigger;
//   (the DCT spectral trigger is external: its request enters on dct_trig,
//    and the synchronised samples it needs leave on sd_data);
//   trace_buffer   - two switching 1024+2048-bin event buffers;
//   event_readout  - scans an event for signal outside the legacy window and
//                    sends 768-bin transmissions (standard, summed or
//                    extended);
//   data_formatter - 6x14-bit bins to the legacy 6x10-bit words;
//   diag_insert    - diagnostic words in the last 8 bins;
//   ub_dma_port    - 32-bit DMA port read by the station controller.
// The bin entering the buffer is delayed by one clock so that the bin that
// fires a trigger sits at event index 1024, the trigger position. The
// internal triggers answer one clock after the bin they judge; an external
// DCT trigger must do the same (dct_trig high in the clock after the bin
// appeared on sd_data) for its bin to land at index 1024.
// Per event the module records the trigger source, a timestamp (sampling
// clocks since reset) and an event number; the diagnostic words carry them:
//   word 760: event number (20 b), {trig src, mode, N code, transmission,
//             LG format, 12-bit mode}, lost-trigger count, {LG shift,
//             extended on}, marker 2A5
//   word 761: 40-bit timestamp in channels 0..3
//   word 762: 10 LSB of the Thr and ToT thresholds of each PMT
//   word 763: 10 LSB of the window-check thresholds
//   words 764..767: zero
// This layout is this design's own; the paper leaves the content open.
//
// CPLD part (clock mclk, 40 MHz): ps_config_loader, which reloads the FPGA in
// Passive Serial mode from one of 8 files in nonvolatile memory.
//
// Run-time settings (thresholds, enables, formats) are plain inputs here; on
// the board they come from registers written by the station controller.
module feb_top
  import feb_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // ADC chips: per-chip PLL clocks and parallel data
  input  logic [3:0]                adc_clk,
  input  bin_t                      adc_sd,
  input  logic [1:0][AUX_W-1:0]     adc_aux,
  // synchronised samples for the external DCT trigger and NIOS buffers
  output bin_t                      sd_data,
  output logic [1:0][AUX_W-1:0]     aux_data,
  input  logic                      dct_trig,
  // run-time settings
  input  logic [2:0]                trig_en,     // {dct, tot, thr}
  input  sample_t [N_PMT-1:0]       thr_thr,
  input  sample_t [N_PMT-1:0]       tot_thr,
  input  sample_t [N_PMT-1:0]       chk_thr,
  input  logic                      ext_en,
  input  xfer_mode_e                xmode,
  input  lg_fmt_e                   lg_fmt,
  input  logic [2:0]                lg_shift,
  input  logic                      adc12,
  input  logic                      diag_en,
  // status
  output logic                      stalled,
  output logic [15:0]               lost_cnt,
  output logic [19:0]               event_cnt,
  // Unified Board DMA port
  input  logic                      ub_cs_n,
  input  logic                      ub_rd_n,
  output logic [31:0]               ub_data,
  output logic                      ub_irq,
  // CPLD configuration loader
  input  logic                      mclk,
  input  logic                      mrst_n,
  input  logic                      cfg_cmd_valid,
  input  logic [2:0]                cfg_cmd_slot,
  output logic                      cfg_busy,
  output logic                      cfg_done,
  output logic                      cfg_error,
  output logic                      mem_req,
  output logic [26:0]               mem_addr,
  input  logic                      mem_ack,
  input  logic [7:0]                mem_rdata,
  output logic                      ps_nconfig,
  input  logic                      ps_nstatus,
  input  logic                      ps_conf_done,
  output logic                      ps_dclk,
  output logic                      ps_data0
);

  localparam int unsigned AW = $clog2(BUF_PRE + BUF_POST);

  // ---------------------------------------------------------------- ADCs
  for (genvar g = 0; g < 3; g++) begin : g_sd
    adc_sync #(.W(ADC_W), .CH(2), .STAGES(3)) u_sync (
      .adc_clk   (adc_clk[g]),
      .adc_data  (adc_sd[2*g+1 -: 2]),
      .clk,
      .sync_data (sd_data[2*g+1 -: 2])
    );
  end
  adc_sync #(.W(AUX_W), .CH(2), .STAGES(3)) u_sync_aux (
    .adc_clk (adc_clk[3]), .adc_data (adc_aux), .clk, .sync_data (aux_data)
  );

  // ------------------------------------------------------------ triggers
  logic thr_t, tot_t, trig;
  logic [2:0] src, src_q;
  bin_t bin_d;
  logic [39:0] ts, ts_q;

  thr_trigger u_thr (
    .clk, .rst_n, .sample_en (1'b1), .hg (sd_data[N_PMT-1:0]), .thr (thr_thr), .trig (thr_t)
  );
  tot_trigger u_tot (
    .clk, .rst_n, .sample_en (1'b1), .hg (sd_data[N_PMT-1:0]), .thr (tot_thr), .trig (tot_t)
  );

  assign src  = trig_en & {dct_trig, tot_t, thr_t};
  assign trig = |src;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_d <= '0;
      ts    <= '0;
      ts_q  <= '0;
      src_q <= '0;
    end else begin
      bin_d <= sd_data;
      ts    <= ts + 1'b1;
      ts_q  <= ts - 1'b1;   // sampling clock of the trigger bin
      src_q <= src;
    end
  end

  // -------------------------------------------------------------- buffers
  logic          trig_acc, acc_bank, trig_lost, evt_ready, rd_bank, rd_release;
  logic [AW-1:0] rd_idx;
  bin_t          rd_data;
  evt_meta_t     meta [2];

  trace_buffer u_buf (
    .clk, .rst_n,
    .wr_en (1'b1), .wr_data (bin_d), .trig,
    .trig_acc, .acc_bank, .trig_lost, .stalled,
    .evt_ready, .rd_bank, .rd_idx, .rd_data, .rd_release
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta      <= '{default: '0};
      event_cnt <= '0;
      lost_cnt  <= '0;
    end else begin
      if (trig_acc) begin
        meta[acc_bank] <= '{trig_src: src_q, timestamp: ts_q, event_no: event_cnt};
        event_cnt      <= event_cnt + 1'b1;
      end
      if (trig_lost && lost_cnt != '1) lost_cnt <= lost_cnt + 1'b1;
    end
  end

  // -------------------------------------------------------------- readout
  logic        r_valid, r_ready, r_last;
  bin_t        r_bin;
  logic [9:0]  r_word;
  logic [1:0]  r_seg, r_ncode;
  xfer_mode_e  r_xmode;

  event_readout u_rd (
    .clk, .rst_n, .ext_en, .xmode, .chk_thr,
    .evt_ready, .rd_idx, .rd_data, .rd_release,
    .out_valid (r_valid), .out_ready (r_ready), .out_bin (r_bin),
    .out_word (r_word), .out_seg (r_seg), .out_n_code (r_ncode),
    .out_xmode (r_xmode), .out_last (r_last)
  );

  word_t f_word;
  logic [N_PMT-1:0] hg_sat;
  data_formatter u_fmt (
    .bin_in (r_bin), .lg_fmt, .lg_shift, .adc12, .word_out (f_word), .hg_sat
  );

  word_t [DIAG_WORDS-1:0] diag;
  evt_meta_t m;
  assign m = meta[rd_bank];
  always_comb begin
    diag = '0;
    diag[0][0] = m.event_no[9:0];
    diag[0][1] = m.event_no[19:10];
    diag[0][2] = {m.trig_src, r_xmode, r_ncode, r_seg, lg_fmt, adc12};
    diag[0][3] = lost_cnt[9:0];
    diag[0][4] = {6'd0, lg_shift, ext_en};
    diag[0][5] = 10'h2A5;
    diag[1][0] = m.timestamp[9:0];
    diag[1][1] = m.timestamp[19:10];
    diag[1][2] = m.timestamp[29:20];
    diag[1][3] = m.timestamp[39:30];
    for (int p = 0; p < N_PMT; p++) begin
      diag[2][p]       = thr_thr[p][9:0];
      diag[2][N_PMT+p] = tot_thr[p][9:0];
      diag[3][p]       = chk_thr[p][9:0];
    end
  end

  logic       d_valid, d_ready, d_last;
  word_t      d_word;
  logic [9:0] d_pos;
  diag_insert u_diag (
    .diag_en, .diag,
    .in_valid (r_valid), .in_ready (r_ready), .in_word (f_word), .in_pos (r_word), .in_last (r_last),
    .out_valid (d_valid), .out_ready (d_ready), .out_word (d_word), .out_pos (d_pos), .out_last (d_last)
  );

  ub_dma_port u_ub (
    .clk, .rst_n,
    .in_valid (d_valid), .in_ready (d_ready), .in_word (d_word), .in_pos (d_pos), .in_last (d_last),
    .ub_cs_n, .ub_rd_n, .ub_data, .ub_irq
  );

  // ----------------------------------------------------------------- CPLD
  ps_config_loader u_ps (
    .clk (mclk), .rst_n (mrst_n),
    .cmd_valid (cfg_cmd_valid), .cmd_slot (cfg_cmd_slot),
    .busy (cfg_busy), .done (cfg_done), .error (cfg_error),
    .mem_req, .mem_addr, .mem_ack, .mem_rdata,
    .nconfig (ps_nconfig), .nstatus (ps_nstatus), .conf_done (ps_conf_done),
    .dclk (ps_dclk), .data0 (ps_data0)
  );

endmodule
