// event_readout: reads a full event buffer and turns it into 768-bin
// transmissions for the station controller.
//
// For each event held in the trace buffer:
//  1. If extended handling is enabled, the whole buffer (PRE+POST bins) is
//     scanned once through window_check to find signal outside the legacy
//     window.
//  2. A factor N is chosen: 1 with no such signal (or extended handling
//     off), 2 if it lies only in the "near" zone, 4 otherwise. The span
//     sent is [PRE - N*STD_PRE, PRE + N*STD_POST), i.e. 768*N bins keeping
//     the 1:2 split around the trigger (768..1535, 512..2047 or 0..3071).
//  3. The span is sent as 768-bin transmissions, either
//       XM_SUM      : one transmission, each bin the sum of N neighbouring
//                     bins (lossy compression), clipped to 14 bits; or
//       XM_EXTENDED : N transmissions of consecutive 768-bin pieces (the
//                     standard one plus 1 or 3 "extended" ones, lossless).
//  4. The buffer is released.
// The paper gives the two sending variants, the 2/4 factors and the 1/3
// extra transmissions; the near/far rule that picks N, the centring of the
// span and the clipping are this design's choices.
//
// Interfaces: buffer port as in trace_buffer (rd_idx, rd_data one clock
// later, rd_release). Output is a valid/ready stream of bins with their
// position (word 0..767), transmission number seg and factor code
// n_code (0:1, 1:2, 2:4). Timing: the scan takes PRE+POST+3 clocks; each
// output word then takes N+2 clocks (SUM) or 3 clocks (EXTENDED) plus any
// wait on out_ready.
module event_readout
  import feb_pkg::*;
#(
  parameter int unsigned PRE   = BUF_PRE,
  parameter int unsigned POST  = BUF_POST,
  parameter int unsigned SPRE  = STD_PRE,
  parameter int unsigned SPOST = STD_POST,
  localparam int unsigned DEPTH = PRE + POST,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned TLEN  = SPRE + SPOST
) (
  input  logic                clk,
  input  logic                rst_n,
  // configuration, taken at the start of each event
  input  logic                ext_en,
  input  xfer_mode_e          xmode,
  input  sample_t [N_PMT-1:0] chk_thr,
  // trace buffer
  input  logic                evt_ready,
  output logic [AW-1:0]       rd_idx,
  input  bin_t                rd_data,
  output logic                rd_release,
  // bin stream
  output logic                out_valid,
  input  logic                out_ready,
  output bin_t                out_bin,
  output logic [9:0]          out_word,
  output logic [1:0]          out_seg,
  output logic [1:0]          out_n_code,
  output xfer_mode_e          out_xmode,
  output logic                out_last      // last word of the event
);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_SCAN_END, S_DECIDE,
                            S_RD, S_WAIT, S_OUT, S_DONE} state_e;
  state_e state;

  logic [AW-1:0]        addr;
  logic                 rd_v_q, scan_v_q;
  logic [AW-1:0]        idx_q;
  logic [2:0]           k;
  logic [9:0]           word;
  logic [1:0]           seg;
  logic [1:0]           n_code;
  logic                 ext_q;
  xfer_mode_e           xm_q;
  logic [N_CH-1:0][15:0] acc;
  logic                 near_sig, far_sig;
  logic [2:0]           nsum;
  logic [2:0]           nseg;

  assign nsum = (xm_q == XM_SUM) ? 3'(1 << n_code) : 3'd1;
  assign nseg = (xm_q == XM_EXTENDED) ? 3'(1 << n_code) : 3'd1;

  window_check #(.PRE(PRE), .POST(POST), .SPRE(SPRE), .SPOST(SPOST)) u_chk (
    .clk, .rst_n,
    .clear (state == S_IDLE),
    .valid (scan_v_q),
    .idx   (idx_q),
    .hg    (rd_data[N_PMT-1:0]),
    .thr   (chk_thr),
    .near_sig, .far_sig
  );

  assign rd_idx     = addr;
  assign out_valid  = (state == S_OUT);
  assign out_word   = word;
  assign out_seg    = seg;
  assign out_n_code = n_code;
  assign out_xmode  = xm_q;
  assign out_last   = (word == 10'(TLEN-1)) && (3'(seg) == nseg - 3'd1);
  assign rd_release = (state == S_DONE);

  always_comb begin
    for (int c = 0; c < N_CH; c++)
      out_bin[c] = (acc[c] > 16'(2**ADC_W - 1)) ? sample_t'(2**ADC_W - 1) : acc[c][ADC_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      addr     <= '0;
      rd_v_q   <= 1'b0;
      scan_v_q <= 1'b0;
      idx_q    <= '0;
      k        <= '0;
      word     <= '0;
      seg      <= '0;
      n_code   <= '0;
      ext_q    <= 1'b0;
      xm_q     <= XM_SUM;
      acc      <= '0;
    end else begin
      rd_v_q   <= 1'b0;
      scan_v_q <= 1'b0;
      idx_q    <= addr;
      if (rd_v_q)
        for (int c = 0; c < N_CH; c++) acc[c] <= acc[c] + 16'(rd_data[c]);

      unique case (state)
        S_IDLE: if (evt_ready) begin
          ext_q <= ext_en;
          xm_q  <= xmode;
          addr  <= '0;
          if (ext_en) state <= S_SCAN;
          else        state <= S_DECIDE;
        end
        S_SCAN: begin
          scan_v_q <= 1'b1;
          addr     <= addr + 1'b1;
          if (addr == AW'(DEPTH-1)) state <= S_SCAN_END;
        end
        S_SCAN_END: state <= S_DECIDE;
        S_DECIDE: begin
          logic [1:0] nc;
          nc = !ext_q ? 2'd0 : far_sig ? 2'd2 : near_sig ? 2'd1 : 2'd0;
          n_code <= nc;
          addr   <= AW'(PRE - (SPRE << nc));
          acc    <= '0;
          k      <= '0;
          word   <= '0;
          seg    <= '0;
          state  <= S_RD;
        end
        S_RD: begin
          rd_v_q <= 1'b1;
          addr   <= addr + 1'b1;
          k      <= k + 1'b1;
          if (k == nsum - 3'd1) state <= S_WAIT;
        end
        S_WAIT: state <= S_OUT;
        S_OUT: if (out_ready) begin
          acc <= '0;
          k   <= '0;
          if (word == 10'(TLEN-1)) begin
            word <= '0;
            if (3'(seg) == nseg - 3'd1) state <= S_DONE;
            else begin
              seg   <= seg + 1'b1;
              state <= S_RD;
            end
          end else begin
            word  <= word + 1'b1;
            state <= S_RD;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
