// tb_data_formatter: random and corner-case bins through both LG variants,
// all shifts and the 12-bit mode, compared with a reference written here.
`timescale 1ns/1ps
module tb_data_formatter;
  import feb_pkg::*;
  bin_t    bin_in;
  lg_fmt_e lg_fmt;
  logic [2:0] lg_shift;
  logic    adc12;
  word_t   word_out;
  logic [N_PMT-1:0] hg_sat;
  int checks = 0, failures = 0;

  data_formatter dut (.*);

  function automatic logic [9:0] ref_hg(input int v);
    return (v >= 1024) ? 10'h3FF : 10'(v);
  endfunction

  task automatic check_one();
    int hgv, lgv, s, e;
    #1;
    for (int p = 0; p < 3; p++) begin
      hgv = int'(bin_in[p]);
      lgv = int'(bin_in[3+p]);
      if (adc12) begin hgv = hgv / 4 * 4; lgv = lgv / 4 * 4; end
      checks++;
      if (word_out[p] !== ref_hg(hgv) || hg_sat[p] !== (hgv > 1023)) begin
        failures++; $display("HG fail p=%0d in=%0d out=%h", p, hgv, word_out[p]);
      end
      if (lg_fmt == LG_HGMSB) e = (lgv / 256) * 16 + (hgv / 1024);
      else begin
        s = (lg_shift > 4) ? 4 : int'(lg_shift);
        e = lgv / (1 << s);
        if (e > 1023) e = 1023;
      end
      checks++;
      if (word_out[3+p] !== 10'(e)) begin
        failures++; $display("LG fail p=%0d lg=%0d hg=%0d fmt=%0d sh=%0d out=%h exp=%h",
                             p, lgv, hgv, lg_fmt, lg_shift, word_out[3+p], e);
      end
    end
  endtask

  initial begin
    // corners: 1023 / 1024 / 16383
    adc12 = 0; lg_shift = 0; lg_fmt = LG_HGMSB;
    bin_in = '0; bin_in[0] = 1023; bin_in[1] = 1024; bin_in[2] = 16383;
    bin_in[3] = 16383; bin_in[4] = 255; bin_in[5] = 256;
    check_one();
    lg_fmt = LG_SHIFTED;
    for (int s = 0; s < 8; s++) begin lg_shift = 3'(s); check_one(); end
    for (int i = 0; i < 2000; i++) begin
      for (int c = 0; c < 6; c++) begin
        // mix small and full-range values
        bin_in[c] = (($urandom % 2) != 0) ? 14'($urandom % 1100) : 14'($urandom);
      end
      lg_fmt   = lg_fmt_e'($urandom % 2);
      lg_shift = 3'($urandom);
      adc12    = ($urandom % 4) == 0;
      check_one();
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
