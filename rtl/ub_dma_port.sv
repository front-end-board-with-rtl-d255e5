// ub_dma_port: the port through which the station controller on the Unified
// Board (UB) reads event data by DMA.
//
// The UB runs its bus at 40 MHz with one wait state, asynchronously to the
// sampling clock. Its 32 data lines (paper, bank 5A) carry one 60-bit legacy
// bin as two reads:
//   read 0: {first_of_event, first_of_transmission, ch2, ch1, ch0}
//   read 1: {last_of_event,  last_of_transmission,  ch5, ch4, ch3}
// (ch0..2 = HG, ch3..5 = LG words). The split and the flag bits are this
// design's choice; the paper gives only the bus rate and wait state.
//
// Operation: ub_data always shows the current half-word (prefetched). The
// UB's chip select and read strobe (active low) pass a two-stage
// synchroniser; the end of a read (rising read strobe while selected)
// advances to the next half-word, taking a new bin from the stream after
// read 1. ub_irq is high while the first word of an event is waiting, which
// tells the UB that an event is ready.
// Timing: the next half-word is on ub_data at most 4 sampling clocks after
// the strobe rises (33 ns at 120 MHz), within the 25 ns idle plus 50 ns
// strobe of the next UB read.
module ub_dma_port
  import feb_pkg::*;
#(
  parameter int unsigned TLEN = TRACE_LEN
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  word_t       in_word,
  input  logic [9:0]  in_pos,
  input  logic        in_last,
  input  logic        ub_cs_n,
  input  logic        ub_rd_n,
  output logic [31:0] ub_data,
  output logic        ub_irq
);

  logic [1:0] rd_sync;
  logic       rd_q;
  logic       rd_end;
  logic       have;       // a bin is held
  logic       half;       // which half-word is shown
  word_t      w_q;
  logic [9:0] pos_q;
  logic       last_q;
  logic       evt_first;  // next bin taken starts an event

  // active-high "read in progress" = selected and strobe low
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_sync <= '0;
      rd_q    <= 1'b0;
    end else begin
      rd_sync <= {rd_sync[0], ~ub_cs_n & ~ub_rd_n};
      rd_q    <= rd_sync[1];
    end
  end
  assign rd_end   = rd_q & ~rd_sync[1];
  assign in_ready = !have;

  logic first_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have      <= 1'b0;
      half      <= 1'b0;
      w_q       <= '0;
      pos_q     <= '0;
      last_q    <= 1'b0;
      first_q   <= 1'b0;
      evt_first <= 1'b1;
    end else begin
      if (in_valid && in_ready) begin
        have      <= 1'b1;
        half      <= 1'b0;
        w_q       <= in_word;
        pos_q     <= in_pos;
        last_q    <= in_last;
        first_q   <= evt_first;
        evt_first <= in_last;
      end else if (rd_end && have) begin
        if (half) have <= 1'b0;
        half <= ~half;
      end
    end
  end

  always_comb begin
    if (!half) ub_data = {first_q, pos_q == 10'd0, w_q[2], w_q[1], w_q[0]};
    else       ub_data = {last_q, pos_q == 10'(TLEN-1), w_q[5], w_q[4], w_q[3]};
    if (!have) ub_data = '0;
  end

  assign ub_irq = have && first_q && !half;

endmodule
