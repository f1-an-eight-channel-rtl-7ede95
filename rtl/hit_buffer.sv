// hit_buffer: the per-channel dual-port hit memory (16 x 16 bits).
// One port appends hit words at the write pointer; the other is read at any
// address by the trigger matching unit. The start-search pointer, moved only
// by the matching unit, marks the oldest hit still of interest: everything
// before it is deleted. When the write pointer has caught up with it (16
// words held) further hits are refused and counted as lost.
// Pointers carry one extra wrap bit so full and empty can be told apart.
// Timing: a write is stored at the clock edge; reads are asynchronous.
// Paper: dual-port, random access, 16 words, start-search pointer, blocking
// when full. Own choice: asynchronous read port, saturating lost counter.
module hit_buffer
  import f1_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [TIME_W-1:0] wr_data,
  input  logic [AW:0]       rd_ptr,      // read pointer of the matching unit
  output logic [TIME_W-1:0] rd_data,
  input  logic              ssp_load,
  input  logic [AW:0]       ssp_next,
  output logic [AW:0]       wp,          // write pointer
  output logic [AW:0]       ssp,         // start-search pointer
  output logic              full,
  output logic [7:0]        lost         // hits refused, saturating
);
  logic [TIME_W-1:0] mem [DEPTH];

  assign full    = (wp[AW] != ssp[AW]) && (wp[AW-1:0] == ssp[AW-1:0]);
  assign rd_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (wr_en && !full) mem[wp[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      ssp  <= '0;
      lost <= '0;
    end else begin
      if (wr_en && !full) wp <= wp + 1'b1;
      if (wr_en && full && lost != 8'hff) lost <= lost + 8'd1;
      if (ssp_load) ssp <= ssp_next;
    end
  end
endmodule
