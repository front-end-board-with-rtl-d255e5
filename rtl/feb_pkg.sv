// feb_pkg: constants and types shared by the trigger/memory circuitry of the
// front-end board.
//
// The board digitises three photomultipliers, each split into a high-gain (HG)
// and a low-gain (LG) channel, with 14-bit ADCs, plus two 12-bit auxiliary
// channels. A time bin of the surface-detector data path therefore holds six
// 14-bit samples (84 bits). The readout to the station controller keeps the
// legacy event format of six 10-bit words per bin and 768 bins per trace
// (256 before the trigger, 512 after), while the on-chip buffers are four
// times longer (1024 + 2048 bins). These numbers follow the paper; the channel
// order inside a bin and the enumerations below are this design's own choice.
package feb_pkg;

  // ADC and word widths
  localparam int unsigned ADC_W   = 14;   // SD channel resolution
  localparam int unsigned AUX_W   = 12;   // extra channels (radio, muon counters)
  localparam int unsigned FMT_W   = 10;   // legacy word per channel
  localparam int unsigned N_PMT   = 3;
  localparam int unsigned N_CH    = 6;    // 3 HG + 3 LG

  // Legacy trace: 256 bins before the trigger + 512 after = 768
  localparam int unsigned STD_PRE   = 256;
  localparam int unsigned STD_POST  = 512;
  localparam int unsigned TRACE_LEN = STD_PRE + STD_POST;
  localparam int unsigned DIAG_WORDS = 8;  // last 8 words carry diagnostics

  // On-chip event buffers: 1024 + 2048 bins, two of them
  localparam int unsigned BUF_PRE  = 1024;
  localparam int unsigned BUF_POST = 2048;

  typedef logic [ADC_W-1:0]            sample_t;
  // Channel order in a bin: [0..2] = HG of PMT 1..3, [3..5] = LG of PMT 1..3
  typedef logic [N_CH-1:0][ADC_W-1:0]  bin_t;
  typedef logic [N_CH-1:0][FMT_W-1:0]  word_t;

  // How the LG 10-bit word is filled (the two variants the paper lists)
  typedef enum logic {
    LG_HGMSB   = 1'b0,  // {LG[13:8], HG[13:10]}
    LG_SHIFTED = 1'b1   // LG >> shift, saturated to 10 bits
  } lg_fmt_e;

  // How an event with signal outside the standard window is sent
  typedef enum logic {
    XM_SUM      = 1'b0, // 768 words, each a sum of 2 or 4 neighbouring bins (lossy)
    XM_EXTENDED = 1'b1  // 2 or 4 consecutive 768-word transmissions (lossless)
  } xfer_mode_e;

  // Per-event information carried alongside the readout
  typedef struct packed {
    logic [2:0]  trig_src;   // {dct, tot, thr}
    logic [39:0] timestamp;  // sample count at the trigger bin
    logic [19:0] event_no;
  } evt_meta_t;

endpackage
