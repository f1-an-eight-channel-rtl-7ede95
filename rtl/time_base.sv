// time_base: coarse counter and reference time shared by all channels.
// The coarse counter steps once per ring-oscillator period (the clock of this
// logic), which spans 38 fine bins, so it is kept directly in bins: `base`
// grows by 38 per clock, modulo 2^17. A time stamp is base + fine bin.
// Synch-Reset clears the counter and the reference, so that all chips of a
// system count from the same instant. Common start loads the reference with
// the full-precision time of the start edge (its 19 latched taps), so that
// later hits are measured relative to it.
// Timing: synch_reset and common_stb act on the next clock edge.
// Paper: 16-bit range by a coarse counter, 17-bit current and reference time,
// Synch-Reset and Common start inputs. Own choices: counting in bins, the
// effect of each input. The reference-time reset counter of the block
// diagram is not built; its function is not described.
module time_base
  import f1_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             synch_reset,
  input  logic             common_stb,
  input  logic [NTAPS-1:0] common_taps,
  output logic [CUR_W-1:0] base,      // coarse time in bins
  output logic [CUR_W-1:0] ref_time   // reference time in bins
);
  logic [5:0] common_fine;

  fine_encoder u_fine (.taps(common_taps), .fine(common_fine));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      base     <= '0;
      ref_time <= '0;
    end else if (synch_reset) begin
      base     <= '0;
      ref_time <= '0;
    end else begin
      base <= base + CUR_W'(FINE_BINS);
      if (common_stb) ref_time <= base + CUR_W'(common_fine);
    end
  end
endmodule
