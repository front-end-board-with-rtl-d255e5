// trace_buffer: two switching event buffers, each holding PRE bins before a
// trigger and POST bins from the trigger bin on (1024 + 2048 = 3072 bins of
// 84 bits, following the paper).
//
// Operation. Samples are written continuously into the active buffer, used as
// a ring. A trigger is accepted once the active buffer holds at least PRE
// samples (it is "armed"). From the trigger bin on, POST samples are written;
// the buffer is then frozen ("full") and writing moves to the other buffer,
// which must collect PRE fresh samples before it accepts a trigger. While one
// buffer waits to be read out, the other keeps taking data, which is what
// keeps the dead time short. If both are full, writing stops until the
// readout releases one. A trigger that arrives while writing is stopped or
// the active buffer is not yet armed is lost and reported on trig_lost; a
// trigger during the POST phase belongs to the event already being taken.
//
// Readout. Buffers are read in the order they were filled. rd_idx is the
// position in the event, 0..PRE+POST-1, with the trigger bin at index PRE;
// the module maps it onto the ring. rd_data is registered: it holds the bin
// addressed in the previous clock. rd_release frees the buffer being read.
//
// The ring organisation, the arming rule and the lost-trigger policy are this
// design's own; the paper gives the sizes and the two switching buffers.
module trace_buffer
  import feb_pkg::*;
#(
  parameter int unsigned PRE  = BUF_PRE,
  parameter int unsigned POST = BUF_POST,
  parameter int unsigned W    = N_CH * ADC_W,
  localparam int unsigned DEPTH = PRE + POST,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write side
  input  logic          wr_en,
  input  logic [W-1:0]  wr_data,
  input  logic          trig,
  output logic          trig_acc,     // trigger accepted (one clock)
  output logic          acc_bank,     // buffer that took it
  output logic          trig_lost,    // trigger lost to dead time (one clock)
  output logic          stalled,      // both buffers full, writing stopped
  // read side
  output logic          evt_ready,    // the buffer to be read is full
  output logic          rd_bank,
  input  logic [AW-1:0] rd_idx,
  output logic [W-1:0]  rd_data,
  input  logic          rd_release
);

  logic [W-1:0]  mem [2*DEPTH];
  logic          wb;
  logic [AW-1:0] wr_ptr;
  logic [AW:0]   fill;
  logic          collecting;
  logic [AW-1:0] post_cnt;
  logic [AW-1:0] trig_ptr [2];
  logic [1:0]    full;
  logic          armed;
  logic          do_wr;
  logic          last_post;
  logic [1:0]    full_rel;   // after this clock's release
  logic [1:0]    full_nx;

  function automatic logic [AW-1:0] wrap_inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  assign armed     = fill >= (AW+1)'(PRE);
  assign do_wr     = wr_en && !stalled;
  assign last_post = collecting && (post_cnt == AW'(POST-1));
  assign evt_ready = full[rd_bank];

  always_comb begin
    full_rel = full;
    if (rd_release) full_rel[rd_bank] = 1'b0;
    full_nx = full_rel;
    if (do_wr && last_post) full_nx[wb] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem[wb ? DEPTH + int'(wr_ptr) : int'(wr_ptr)] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb         <= 1'b0;
      wr_ptr     <= '0;
      fill       <= '0;
      collecting <= 1'b0;
      post_cnt   <= '0;
      trig_ptr   <= '{default: '0};
      full       <= '0;
      stalled    <= 1'b0;
      rd_bank    <= 1'b0;
      trig_acc   <= 1'b0;
      acc_bank   <= 1'b0;
      trig_lost  <= 1'b0;
    end else begin
      trig_acc  <= 1'b0;
      trig_lost <= 1'b0;

      if (rd_release) rd_bank <= ~rd_bank;

      if (stalled) begin
        if (trig && wr_en) trig_lost <= 1'b1;
        if (!full_rel[~wb]) begin
          wb      <= ~wb;
          wr_ptr  <= '0;
          fill    <= '0;
          stalled <= 1'b0;
        end
      end else if (wr_en) begin
        wr_ptr <= wrap_inc(wr_ptr);
        if (!armed) fill <= fill + 1'b1;
        if (collecting) begin
          post_cnt <= post_cnt + 1'b1;
          if (last_post) begin
            collecting <= 1'b0;
            if (!full_rel[~wb]) begin
              wb     <= ~wb;
              wr_ptr <= '0;
              fill   <= '0;
            end else begin
              stalled <= 1'b1;
            end
          end
        end else if (trig) begin
          if (armed) begin
            trig_ptr[wb] <= wr_ptr;
            collecting   <= 1'b1;
            post_cnt     <= AW'(1);  // the trigger bin is the first of POST
            trig_acc     <= 1'b1;
            acc_bank     <= wb;
          end else begin
            trig_lost <= 1'b1;
          end
        end
      end
      full <= full_nx;
    end
  end

  // Ring position of event index rd_idx: trig_ptr - PRE + rd_idx (mod DEPTH)
  logic [AW+1:0] phys_sum;
  logic [AW-1:0] phys;
  always_comb begin
    phys_sum = (AW+2)'(trig_ptr[rd_bank]) + (AW+2)'(rd_idx) + (AW+2)'(DEPTH - PRE);
    if (phys_sum >= (AW+2)'(2*DEPTH))  phys = AW'(phys_sum - (AW+2)'(2*DEPTH));
    else if (phys_sum >= (AW+2)'(DEPTH)) phys = AW'(phys_sum - (AW+2)'(DEPTH));
    else                               phys = AW'(phys_sum);
  end

  always_ff @(posedge clk) rd_data <= mem[rd_bank ? DEPTH + int'(phys) : int'(phys)];

  // The readout releases only a buffer it has read.
  assert property (@(posedge clk) disable iff (!rst_n) rd_release |-> full[rd_bank]);

endmodule
