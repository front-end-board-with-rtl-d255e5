// diag_insert: the "diagnostic" mode of the readout.
//
// Long experience with the legacy traces shows that their last 8 bins hold
// only noise, so they can carry information about the event that the
// monitoring data cannot. When diag_en is set, the words at positions
// TLEN-DW .. TLEN-1 of every transmission (760..767) are replaced by diag[0]
// .. diag[DW-1]; all other words pass unchanged. The paper fixes the number
// and position of these words; what goes into them is chosen by the
// instantiating module.
//
// Interface: a valid/ready stream of formatted words with their position
// pos in the transmission; the side signals pass through. Purely
// combinational, no added latency.
module diag_insert
  import feb_pkg::*;
#(
  parameter int unsigned TLEN = TRACE_LEN,
  parameter int unsigned DW   = DIAG_WORDS
) (
  input  logic          diag_en,
  input  word_t [DW-1:0] diag,
  input  logic          in_valid,
  output logic          in_ready,
  input  word_t         in_word,
  input  logic [9:0]    in_pos,
  input  logic          in_last,
  output logic          out_valid,
  input  logic          out_ready,
  output word_t         out_word,
  output logic [9:0]    out_pos,
  output logic          out_last
);

  localparam int unsigned FIRST = TLEN - DW;

  logic [9:0] rel;
  assign rel       = in_pos - 10'(FIRST);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;
  assign out_pos   = in_pos;
  assign out_last  = in_last;
  assign out_word  = (diag_en && in_pos >= 10'(FIRST)) ? diag[rel[$clog2(DW)-1:0]] : in_word;

endmodule
