// ps_config_loader: logic of the MAX V CPLD that configures the Cyclone V in
// Passive Serial (PS) mode from a configuration file kept in nonvolatile
// memory (the serial NOR flash or the SDHC card).
//
// The memory holds up to 8 configuration files, one per SLOT_BYTES slot
// (128 MB / 8 = 16 MB, enough for the 12 MB file of the largest Cyclone V).
// A single command carrying the slot number starts a reconfiguration:
//   1. nCONFIG is driven low for NCFG_LOW clocks, then released;
//   2. the loader waits for the FPGA to raise nSTATUS;
//   3. bytes are fetched from the slot one by one and shifted out on DATA0,
//      least significant bit first, each bit set while DCLK is low and taken
//      by the FPGA on the rising DCLK edge (DCLK = clk/2);
//   4. once CONF_DONE is high, INIT_CLKS further DCLK cycles are given for
//      the device's initialisation, and the loader reports done.
// nSTATUS falling during the load, or a whole slot sent without CONF_DONE,
// ends the load with error.
// The paper gives the mode, the signal names (Fig. 3), the 128 MB memory and
// its 8 files, and the one-command selection. The memory access is reduced
// here to a byte request/acknowledge port, because the flash and SD-card
// protocols are not described; the PS sequence follows the FPGA vendor's
// usual PS rules, and its timing values are this design's assumptions.
//
// Interface: clk is the CPLD clock (40 MHz on the board). mem_req stays high
// until mem_ack returns the byte at mem_addr.
module ps_config_loader #(
  parameter int unsigned ADDR_W     = 27,        // 128 MB
  parameter int unsigned SLOT_W     = 3,         // 8 files
  parameter int unsigned NCFG_LOW   = 80,        // 2 us at 40 MHz
  parameter int unsigned INIT_CLKS  = 16,
  localparam int unsigned OFF_W     = ADDR_W - SLOT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // command
  input  logic              cmd_valid,
  input  logic [SLOT_W-1:0] cmd_slot,
  output logic              busy,
  output logic              done,
  output logic              error,
  // nonvolatile memory, byte port
  output logic              mem_req,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic              mem_ack,
  input  logic [7:0]        mem_rdata,
  // Passive Serial pins of the FPGA
  output logic              nconfig,
  input  logic              nstatus,
  input  logic              conf_done,
  output logic              dclk,
  output logic              data0
);

  typedef enum logic [2:0] {P_IDLE, P_NCFG, P_WAIT_ST, P_FETCH, P_SHIFT,
                            P_INIT, P_DONE, P_ERR} pstate_e;
  pstate_e state;

  logic [SLOT_W-1:0] slot;
  logic [OFF_W-1:0]  offset;
  logic [7:0]        sh;
  logic [2:0]        bitn;
  logic              phase;   // 0: DCLK low, 1: DCLK high
  logic [$clog2(NCFG_LOW+INIT_CLKS+1)-1:0] cnt;
  logic [1:0]        st_sync, cd_sync;

  assign busy     = state inside {P_NCFG, P_WAIT_ST, P_FETCH, P_SHIFT, P_INIT};
  assign done     = (state == P_DONE);
  assign error    = (state == P_ERR);
  assign mem_req  = (state == P_FETCH);
  assign mem_addr = {slot, offset};
  assign nconfig  = (state != P_NCFG);
  assign dclk     = phase && (state inside {P_SHIFT, P_INIT});
  assign data0    = sh[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_sync <= '0;
      cd_sync <= '0;
    end else begin
      st_sync <= {st_sync[0], nstatus};
      cd_sync <= {cd_sync[0], conf_done};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= P_IDLE;
      slot   <= '0;
      offset <= '0;
      sh     <= '0;
      bitn   <= '0;
      phase  <= 1'b0;
      cnt    <= '0;
    end else begin
      if (cmd_valid && !busy) begin
        slot   <= cmd_slot;
        offset <= '0;
        cnt    <= '0;
        phase  <= 1'b0;
        state  <= P_NCFG;
      end else begin
        unique case (state)
          P_NCFG: begin
            cnt <= cnt + 1'b1;
            if (cnt == $bits(cnt)'(NCFG_LOW - 1)) state <= P_WAIT_ST;
          end
          P_WAIT_ST: if (st_sync[1]) state <= P_FETCH;
          P_FETCH: begin
            if (!st_sync[1]) state <= P_ERR;
            else if (mem_ack) begin
              sh     <= mem_rdata;
              bitn   <= '0;
              phase  <= 1'b0;
              offset <= offset + 1'b1;
              state  <= P_SHIFT;
            end
          end
          P_SHIFT: begin
            phase <= ~phase;
            if (phase) begin
              sh   <= {1'b0, sh[7:1]};
              bitn <= bitn + 1'b1;
              if (bitn == 3'd7) begin
                if (cd_sync[1]) begin
                  cnt   <= '0;
                  state <= P_INIT;
                end else if (!st_sync[1] || offset == '0) begin
                  state <= P_ERR;   // error, or the slot ran out
                end else begin
                  state <= P_FETCH;
                end
              end
            end
          end
          P_INIT: begin
            phase <= ~phase;
            if (phase) begin
              cnt <= cnt + 1'b1;
              if (cnt == $bits(cnt)'(INIT_CLKS - 1)) state <= P_DONE;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
