// tb_ps_config_loader: a memory model (byte = function of its address) and
// a model of the FPGA's Passive Serial port. Two loads from different slots
// check the nCONFIG pulse length, that every byte arrives LSB first from the
// right slot, the extra initialisation clocks after CONF_DONE and the done
// flag; a third load has the FPGA pull nSTATUS low and expects error.
`timescale 1ns/1ps
module tb_ps_config_loader;
  localparam int NCFG = 8, INIT = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  logic [2:0] cmd_slot = 0;
  logic busy, done, error, mem_req, mem_ack = 0, nconfig, nstatus, conf_done, dclk, data0;
  logic [26:0] mem_addr;
  logic [7:0] mem_rdata = 0;
  int checks = 0, failures = 0;

  ps_config_loader #(.NCFG_LOW(NCFG), .INIT_CLKS(INIT)) dut (.*);
  always #12.5 clk = ~clk;

  function automatic logic [7:0] mem_byte(input logic [26:0] a);
    return 8'((32'(a) * 37) ^ (32'(a) >> 8) ^ (32'(a) >> 24) * 91);
  endfunction

  task automatic fail(input string s);
    failures++; if (failures < 10) $display("FAIL %s at %0t", s, $time);
  endtask

  // memory: random access delay
  always @(posedge clk) begin
    mem_ack <= 0;
    if (mem_req && !mem_ack && ($urandom % 3 == 0)) begin
      mem_ack   <= 1;
      mem_rdata <= mem_byte(mem_addr);
    end
  end

  // FPGA model
  int file_bytes = 40, nbytes, nbits, init_clks, low_cycles, fail_at = -1;
  logic [7:0] sh;
  logic [2:0] cur_slot;
  int hi_cnt = 0;
  always @(posedge clk) begin
    if (!nconfig) begin
      low_cycles++;
      hi_cnt = 0; nbytes = 0; nbits = 0; init_clks = 0;
    end else if (hi_cnt < 12) hi_cnt++;
  end
  // nSTATUS: low during nCONFIG and 12 clocks after it, and from byte fail_at on
  assign nstatus   = nconfig && hi_cnt >= 12 && !(fail_at > 0 && nbytes >= fail_at);
  assign conf_done = nbytes >= file_bytes;
  always @(posedge dclk) begin
    if (conf_done) init_clks++;
    else begin
      sh = {data0, sh[7:1]};
      nbits++;
      if (nbits == 8) begin
        logic [26:0] a;
        a = {cur_slot, 24'(nbytes)};
        checks++;
        if (sh !== mem_byte(a)) fail($sformatf("byte %0d: %h expected %h", nbytes, sh, mem_byte(a)));
        nbits = 0;
        nbytes++;
      end
    end
  end

  task automatic load(input logic [2:0] slot, input logic expect_err);
    int t;
    cur_slot = slot;
    low_cycles = 0;
    @(negedge clk); cmd_valid = 1; cmd_slot = slot;
    @(negedge clk); cmd_valid = 0;
    t = 0;
    while (!done && !error && t < 100000) begin @(negedge clk); t++; end
    checks++;
    if (low_cycles != NCFG) fail($sformatf("nCONFIG low for %0d clocks", low_cycles));
    checks++;
    if (expect_err) begin
      if (!error) fail("no error after nSTATUS fell");
    end else begin
      if (!done) fail("load did not finish");
      checks++;
      if (nbytes < file_bytes) fail($sformatf("only %0d bytes", nbytes));
      checks++;
      if (init_clks < INIT) fail($sformatf("only %0d init clocks", init_clks));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (30) @(posedge clk);
    load(3'd5, 0);
    file_bytes = 25;
    load(3'd2, 0);
    fail_at = 10; file_bytes = 40;
    load(3'd7, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
