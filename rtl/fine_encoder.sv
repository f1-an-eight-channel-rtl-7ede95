// fine_encoder: turns the 19 delay-chain states latched at a hit edge into
// a fine time bin 0..37.
// The ring has 19 inverting stages, so an edge runs around it twice per
// coarse-counter period: 38 distinct states, one per bin. Undoing the
// inversion of every other stage gives a thermometer code: while the rising
// wave travels, taps 0..k-1 read 1 (bin k = 1..19); while the falling wave
// travels, taps 0..z-1 read 0 and the rest 1 (bin 19+z = 20..37); all zero is
// bin 0, where the coarse counter steps. Counting ones instead of locating
// the edge tolerates single bubbles.
// The 19 taps and 38 bins per tick are the paper's; the polarity convention
// and the position of bin 0 are this design's choice. Purely combinational.
module fine_encoder
  import f1_pkg::*;
(
  input  logic [NTAPS-1:0] taps,   // latched stage outputs, tap 0 = stage 1
  output logic [5:0]       fine    // 0 .. FINE_BINS-1
);
  localparam logic [NTAPS-1:0] ALT = 19'b010_1010_1010_1010_1010;

  logic [NTAPS-1:0] norm;
  logic [4:0]       ones;

  always_comb begin
    norm = taps ^ ALT;
    ones = '0;
    for (int i = 0; i < NTAPS; i++) ones += 5'(norm[i]);
    if (norm[0])         fine = 6'(ones);                 // 1..19
    else if (ones == 0)  fine = 6'd0;
    else                 fine = 6'(FINE_BINS) - 6'(ones); // 20..37
  end
endmodule
