// interface_fifo: gathers the eight readout buffers into the common 16 x 24
// interface FIFO, one event at a time.
// The collector reads channel 0's words up to its end-of-event marker, then
// channel 1's, ... channel 7's, one word per clock, waiting where a channel
// has not finished yet. Each hit becomes a data word; the marker of channel
// 7 becomes the event's trailer word. Word layout (this design's choice):
//   data:    [23:21] TDC ID, [20] 0, [19:17] channel, [16] 0, [15:0] time
//   trailer: [23:21] TDC ID, [20] 1, [19:6] 0, [5:0] trigger number
// `data_ready` is set while a whole event (its trailer) is in the FIFO, or
// the FIFO is full, so that an event longer than 16 words can still leave.
// Timing: one word per clock in and out; first-word-fall-through read.
// Paper: 8 inputs, 16 x 24 FIFO, TDC ID, data ready once all channels have
// completed an event. Own choice: collection order and word layout.
module interface_fifo
  import f1_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [2:0]      tdc_id,
  input  logic            ro_empty [NCH],
  input  ro_word_t        ro_rdata [NCH],
  output logic            ro_rd    [NCH],
  input  logic            rd,
  output logic [IF_W-1:0] rdata,
  output logic            empty,
  output logic            data_ready
);
  logic [IF_W-1:0] mem [DEPTH];
  logic [AW:0]     wp, rp, events;
  logic [2:0]      ch;
  logic            full, take, push, trailer_in, trailer_out, do_rd;
  logic [IF_W-1:0] word;
  ro_word_t        w;

  assign empty = (wp == rp);
  assign full  = (wp[AW] != rp[AW]) && (wp[AW-1:0] == rp[AW-1:0]);
  assign rdata = mem[rp[AW-1:0]];
  assign do_rd = rd && !empty;

  always_comb begin
    w          = ro_rdata[ch];
    take       = !ro_empty[ch] && !full;
    trailer_in = w.marker && (ch == 3'(NCH-1));
    push       = take && (!w.marker || trailer_in);
    word       = w.marker ? {tdc_id, 1'b1, 14'b0, w.data[EVT_W-1:0]}
                          : {tdc_id, 1'b0, ch, 1'b0, w.data};
    for (int i = 0; i < NCH; i++) ro_rd[i] = take && (ch == 3'(i));
    trailer_out = do_rd && rdata[20];
    data_ready  = (events != 0) || full;
  end

  always_ff @(posedge clk) if (push) mem[wp[AW-1:0]] <= word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp     <= '0;
      rp     <= '0;
      ch     <= '0;
      events <= '0;
    end else begin
      if (push)  wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      if (take && w.marker) ch <= ch + 3'd1;
      events <= events + (AW+1)'(push && trailer_in) - (AW+1)'(trailer_out);
    end
  end
endmodule
