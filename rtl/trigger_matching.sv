// trigger_matching: searches one channel's hit buffer for the hits of a
// trigger and copies them to the channel's readout buffer.
// A command gives the window start (trigger time minus latency). The read
// pointer starts at the start-search pointer and walks towards the write
// pointer, one hit per clock. For each hit d = hit - start (16-bit, modulo):
//   d >= limit      older than the window: while no hit has matched yet, the
//                   start-search pointer is moved past it (the hit is deleted)
//   0 <= d < window match: copied to the readout buffer (not for fake
//                   triggers); the first match leaves the start-search
//                   pointer on itself, so overlapping later windows find it
//   otherwise       younger than the window: the search ends
// (limit = latency + a margin, from the trigger unit: hit times wrap every
// 2^16 units, and a hit more than the margin after its trigger cannot be in
// the buffer when the trigger is matched).
// The search also ends when the read pointer reaches the write pointer. For a
// real trigger an end-of-event marker carrying the trigger number follows the
// copied hits. A full readout buffer stalls the unit.
// Timing: `idle` drops the clock after `start`; one hit per clock, plus one
// clock for the marker.
// Paper: the two pointers, deletion of older hits, copy without deletion,
// the two stop conditions, fake triggers copying nothing. Own choices: the
// old-hit limit, the end marker, the masking of the wire bits in
// latch mode (they are not part of the time).
module trigger_matching
  import f1_pkg::*;
#(
  parameter int unsigned AW = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              latch_mode,
  input  logic [TIME_W-1:0] window,
  input  logic              start,       // command valid
  input  trig_cmd_t         cmd,
  output logic              idle,
  // hit buffer
  output logic [AW:0]       rd_ptr,
  input  logic [TIME_W-1:0] rd_data,
  input  logic [AW:0]       wp,
  input  logic [AW:0]       ssp,
  output logic              ssp_load,
  output logic [AW:0]       ssp_next,
  // readout buffer
  output logic              ro_wr,
  output ro_word_t          ro_data,
  input  logic              ro_full
);
  typedef enum logic [1:0] {S_IDLE, S_SEARCH, S_MARK} state_e;
  state_e            state;
  trig_cmd_t         cur;
  logic              found;
  logic [TIME_W-1:0] hit_t, d;
  logic              older, in_win;

  always_comb begin
    hit_t  = latch_mode ? {rd_data[TIME_W-1:4], 4'b0} : rd_data;
    d      = hit_t - cur.start;
    older  = (d >= cur.limit);
    in_win = !older && (d < window);
    idle   = (state == S_IDLE);
  end

  always_comb begin
    ssp_load = 1'b0;
    ssp_next = rd_ptr + 1'b1;
    ro_wr    = 1'b0;
    ro_data  = '{marker: 1'b0, data: rd_data};
    if (state == S_SEARCH && rd_ptr != wp) begin
      if (older && !found) ssp_load = 1'b1;
      if (in_win && !cur.fake && !ro_full) ro_wr = 1'b1;
    end
    if (state == S_MARK && !ro_full) begin
      ro_wr   = 1'b1;
      ro_data = '{marker: 1'b1, data: TIME_W'(cur.evt)};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      cur    <= '0;
      found  <= 1'b0;
      rd_ptr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          cur    <= cmd;
          found  <= 1'b0;
          rd_ptr <= ssp;
          state  <= S_SEARCH;
        end
        S_SEARCH: begin
          if (rd_ptr == wp) begin
            state <= cur.fake ? S_IDLE : S_MARK;
          end else if (older) begin
            rd_ptr <= rd_ptr + 1'b1;
          end else if (in_win) begin
            if (cur.fake || !ro_full) begin
              found  <= 1'b1;
              rd_ptr <= rd_ptr + 1'b1;
            end
          end else begin
            state <= cur.fake ? S_IDLE : S_MARK;
          end
        end
        S_MARK: if (!ro_full) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // handshake with the readout buffer: never write into a full buffer
  a_ro_not_full: assert property (@(posedge clk) disable iff (!rst_n) ro_wr |-> !ro_full);
endmodule
