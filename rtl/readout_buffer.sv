// readout_buffer: per-channel FIFO (8 x 17 bits) between the trigger
// matching unit and the common interface FIFO, so that a channel can match
// the next trigger while the previous event is still being read out.
// Words are hits (marker = 0) or end-of-event markers carrying the trigger
// number (marker = 1). `events` counts markers held, i.e. complete events.
// Timing: first-word-fall-through; a write is visible the next clock; read
// and write may happen in the same clock.
// Paper: 8 words of 17 bits, fed by the matching unit and the trigger
// counter. Own choice: the marker word and the event count.
module readout_buffer
  import f1_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     wr,
  input  ro_word_t wdata,
  output logic     full,
  input  logic     rd,
  output ro_word_t rdata,
  output logic     empty,
  output logic [AW:0] events
);
  ro_word_t    mem [DEPTH];
  logic [AW:0] wp, rp;
  logic        do_wr, do_rd;

  assign empty = (wp == rp);
  assign full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rdata = mem[rp[AW-1:0]];
  assign do_wr = wr && !full;
  assign do_rd = rd && !empty;

  always_ff @(posedge clk) if (do_wr) mem[wp[AW-1:0]] <= wdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp     <= '0;
      rp     <= '0;
      events <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      events <= events + (AW+1)'(do_wr && wdata.marker) - (AW+1)'(do_rd && rdata.marker);
    end
  end

  // a write is never issued into a full buffer: the matching unit stalls
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) wr |-> !full);
endmodule
