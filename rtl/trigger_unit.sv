// trigger_unit: time stamps triggers, queues them and hands them to the
// eight trigger matching units.
// A trigger edge is measured like a hit: coarse time + fine bin of its 19
// latched taps. Its trigger time is an 11-bit difference (1 LSB = 32 bins,
// range 0..9.8 us at 150 ps): bits 15..5 of this current trigger time minus
// bits 15..5 of the reference time. Minus the 11 upper bits of the
// programmed latency it gives the start of the trigger window. Every trigger steps a 6-bit
// trigger counter. Start and counter value enter a common 4-deep FIFO; a
// trigger arriving with the FIFO full is dropped, and the gap shows in the
// counter values read out. When all matching units are idle the oldest entry
// is broadcast. While the FIFO stays empty, a fake trigger built from the
// current time is broadcast every `fake_interval` clocks (0 = never) to clean
// old hits out of the hit buffers.
// The start is scaled to hit-time units: x32 bins, or x64 half bins in the
// high resolution mode (the upper bit is lost with the halved range).
// Hit times live on a 16-bit circle, so "older than the window" needs a
// boundary: a hit is taken as newer than the window start if it lies less
// than latency + MARGIN after it, i.e. at most MARGIN hit-time units after
// the trigger. Everything further round the circle is older and gets
// deleted. The command carries this limit (saturated at 2^16 - 1). So the
// latency can reach 2^16 - MARGIN units: 61440 bins (9.2 us at 150 ps) with
// the default, 30720 bins (4.6 us) in high resolution mode, less the spacing
// of the fake triggers (the hits held must span less than 2^16 units, and
// the fakes are what deletes the old ones between real triggers); a trigger
// must be matched within MARGIN units (4096 bins, about 108 clocks) of its
// arrival, or hits that came after it would count as old.
// Timing: a trigger enters the FIFO one clock after trig_stb; a command is
// broadcast at most every other clock so the units' busy state is seen.
// Paper: latency subtraction, 11-bit trigger time formed from 11-bit current
// trigger and reference times, 6-bit counter, 4x11 and
// 4x6 FIFO, fake triggers only while the FIFO is empty. Own choices: the
// dispatch rule, the fake interval register, the scaling in hi-res mode,
// the old-hit limit.
module trigger_unit
  import f1_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned MARGIN     = 4096  // hit-time units a hit may follow its trigger
) (
  input  logic              clk,
  input  logic              rst_n,
  input  mode_e             mode,
  input  logic [CUR_W-1:0]  base,
  input  logic [CUR_W-1:0]  ref_time,
  input  logic              trig_stb,
  input  logic [NTAPS-1:0]  trig_taps,
  input  logic [TIME_W-1:0] offset,        // trigger latency in bins
  input  logic              fake_en,
  input  logic [15:0]       fake_interval,  // clocks
  input  logic              all_idle,       // every matching unit idle
  output logic              cmd_valid,
  output trig_cmd_t         cmd,
  output logic [EVT_W-1:0]  trig_count,
  output logic [7:0]        lost            // triggers dropped, saturating
);
  localparam int unsigned PW = $clog2(FIFO_DEPTH);

  logic [5:0]        fine;
  logic [CUR_W-1:0]  cur;
  logic [TRIG_W-1:0] rel11, now_rel11;
  logic [TRIG_W-1:0] start11, now11;
  logic [TRIG_W-1:0] f_start [FIFO_DEPTH];
  logic [EVT_W-1:0]  f_evt   [FIFO_DEPTH];
  logic [PW:0]       wptr, rptr;
  logic              f_empty, f_full;
  logic [15:0]       fake_cnt;
  logic              hold;

  fine_encoder u_fine (.taps(trig_taps), .fine(fine));

  function automatic logic [TIME_W-1:0] scale(input logic [TRIG_W-1:0] t, input mode_e m);
    return (m == MODE_HIRES) ? {t[TRIG_W-2:0], 6'b0} : {t, 5'b0};
  endfunction

  // latency + margin in hit-time units, saturated
  function automatic logic [TIME_W-1:0] old_limit(input logic [TIME_W-1:0] off, input mode_e m);
    logic [TIME_W+1:0] l;
    l = (m == MODE_HIRES) ? {1'b0, off[TIME_W-1:5], 6'b0} + (TIME_W+2)'(MARGIN)
                          : {2'b0, off[TIME_W-1:5], 5'b0} + (TIME_W+2)'(MARGIN);
    return (l > (TIME_W+2)'(16'hffff)) ? 16'hffff : l[TIME_W-1:0];
  endfunction

  always_comb begin
    cur       = base + CUR_W'(fine);
    rel11     = cur[TIME_W-1:5] - ref_time[TIME_W-1:5];
    now_rel11 = base[TIME_W-1:5] - ref_time[TIME_W-1:5];
    start11   = rel11 - offset[TIME_W-1:5];
    now11     = now_rel11 - offset[TIME_W-1:5];
    f_empty = (wptr == rptr);
    f_full  = (wptr[PW] != rptr[PW]) && (wptr[PW-1:0] == rptr[PW-1:0]);
  end

  always_ff @(posedge clk) begin
    if (trig_stb && !f_full) begin
      f_start[wptr[PW-1:0]] <= start11;
      f_evt[wptr[PW-1:0]]   <= trig_count;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      trig_count <= '0;
      lost       <= '0;
      fake_cnt   <= '0;
      cmd_valid  <= 1'b0;
      cmd        <= '0;
      hold       <= 1'b0;
    end else begin
      cmd_valid <= 1'b0;
      hold      <= 1'b0;
      if (trig_stb) begin
        trig_count <= trig_count + 1'b1;
        if (!f_full) wptr <= wptr + 1'b1;
        else if (lost != 8'hff) lost <= lost + 8'd1;
      end
      if (!f_empty || !fake_en) fake_cnt <= '0;
      else if (fake_cnt != 16'hffff) fake_cnt <= fake_cnt + 16'd1;

      if (all_idle && !hold && !cmd_valid) begin
        if (!f_empty) begin
          cmd_valid <= 1'b1;
          hold      <= 1'b1;
          cmd       <= '{fake: 1'b0, evt: f_evt[rptr[PW-1:0]],
                         start: scale(f_start[rptr[PW-1:0]], mode),
                         limit: old_limit(offset, mode)};
          rptr      <= rptr + 1'b1;
        end else if (fake_en && fake_interval != 0 && fake_cnt >= fake_interval) begin
          cmd_valid <= 1'b1;
          hold      <= 1'b1;
          cmd       <= '{fake: 1'b1, evt: '0, start: scale(now11, mode),
                         limit: old_limit(offset, mode)};
          fake_cnt  <= '0;
        end
      end
    end
  end
endmodule
