// channel_input: forms the 16-bit word that one channel writes into its hit
// buffer, in each of the three modes.
//  * standard: current time = coarse time + fine bin of the latched taps;
//    the word is current time - reference time (16 bits, 1 LSB = one bin).
//    Leading and/or trailing edges are accepted as enabled.
//  * high resolution: the channel and its sister see the same signal, the
//    sister delayed by half a bin. The sum of the two relative times is the
//    time in half bins (floor(t) + floor(t + 1/2) = floor(2t)), kept to 16 bits,
//    so the range halves. Successive pair hits go alternately to the even
//    and the odd channel's hit buffer.
//  * latch: the four-wire latch (latch_input) supplies a wire pattern; the
//    word is the 12 upper bits of the relative time at the end of the strobe
//    followed by the four wire bits.
// Timing: wr_en/wr_data one clock after hit_stb (two after the strobe end in
// latch mode). Both channels of a pair must deliver hit_stb in the same clock.
// Paper: the three modes, the word layouts, the alternate storage. Own
// choice: the pair sum as the way the two measurements are combined.
module channel_input
  import f1_pkg::*;
#(
  parameter bit IS_ODD = 1'b0   // position of this channel in its pair
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic [1:0]        edge_en,     // [0] leading, [1] trailing
  input  logic [5:0]        strobe_len,
  input  logic [CUR_W-1:0]  base,
  input  logic [CUR_W-1:0]  ref_time,
  input  logic              hit_stb,
  input  logic              hit_edge,    // 1 = leading edge
  input  logic [NTAPS-1:0]  hit_taps,
  input  logic              pair_stb,    // sister channel
  input  logic [NTAPS-1:0]  pair_taps,
  input  logic [3:0]        wires,       // latch-mode inputs of this channel
  output logic              wr_en,
  output logic [TIME_W-1:0] wr_data
);
  logic [5:0]        fine, pair_fine;
  logic [TIME_W-1:0] rel, pair_rel, coarse_rel;
  logic              edge_ok, toggle;
  logic              l_stb;
  logic [3:0]        l_data;

  fine_encoder u_fine (.taps(hit_taps),  .fine(fine));
  fine_encoder u_pair (.taps(pair_taps), .fine(pair_fine));

  latch_input u_latch (
    .clk, .rst_n, .en(mode == MODE_LATCH), .wires, .strobe_len,
    .stb(l_stb), .data(l_data)
  );

  always_comb begin
    rel      = TIME_W'(base + CUR_W'(fine) - ref_time);
    pair_rel = TIME_W'(base + CUR_W'(pair_fine) - ref_time);
    coarse_rel = TIME_W'(base - ref_time);
    edge_ok  = hit_edge ? edge_en[0] : edge_en[1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_data <= '0;
      toggle  <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      unique case (mode)
        MODE_STD: if (hit_stb && edge_ok) begin
          wr_en   <= 1'b1;
          wr_data <= rel;
        end
        MODE_HIRES: if (hit_stb && pair_stb && edge_ok) begin
          toggle  <= !toggle;
          wr_en   <= (toggle == IS_ODD);
          wr_data <= rel + pair_rel;
        end
        MODE_LATCH: if (l_stb) begin
          wr_en   <= 1'b1;
          wr_data <= {coarse_rel[TIME_W-1:4], l_data};
        end
        default: ;
      endcase
    end
  end
endmodule
