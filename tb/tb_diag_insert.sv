// tb_diag_insert: streams full 768-word transmissions with and without the
// diagnostic mode and checks that exactly words 760..767 are replaced, in
// order, and that handshake and side signals pass through.
`timescale 1ns/1ps
module tb_diag_insert;
  import feb_pkg::*;
  logic diag_en;
  word_t [DIAG_WORDS-1:0] diag;
  logic in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  word_t in_word, out_word;
  logic [9:0] in_pos, out_pos;
  int checks = 0, failures = 0;

  diag_insert dut (.*);

  initial begin
    for (int d = 0; d < DIAG_WORDS; d++)
      for (int c = 0; c < N_CH; c++) diag[d][c] = 10'($urandom);
    for (int pass = 0; pass < 4; pass++) begin
      diag_en = pass[0];
      for (int p = 0; p < TRACE_LEN; p++) begin
        word_t e;
        in_pos = 10'(p);
        for (int c = 0; c < N_CH; c++) in_word[c] = 10'($urandom);
        in_valid = 1'($urandom); out_ready = 1'($urandom); in_last = 1'($urandom);
        #1;
        e = (diag_en && p >= 760) ? diag[p - 760] : in_word;
        checks++;
        if (out_word !== e || out_pos !== in_pos || out_valid !== in_valid ||
            in_ready !== out_ready || out_last !== in_last) begin
          failures++;
          if (failures < 5) $display("pos %0d en %0d: %h expected %h", p, diag_en, out_word, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
