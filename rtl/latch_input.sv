// latch_input: the latch (hit) mode front of one channel, four wires.
// The first hit on any of the four wires (their OR) starts a 6-bit strobe
// counter on the next clock; the counter runs at the coarse-counter rate.
// For strobe_len+1 clocks (1..64, i.e. 5.7 ns .. 364.8 ns at 150 ps bins)
// the active hit register ORs in every wire that fires. When the strobe
// ends, the register is closed and handed out (stb, data) and the inputs are
// switched to the second register. In the switching clock both registers
// accept, so no hit falls into a gap; such a hit starts the next strobe.
// Timing: stb/data appear one clock after the last strobe clock.
// Paper: OR of four wires, 6-bit counter synchronous to the coarse counter,
// preset strobe of 1..64 periods, two alternating hit registers. Own
// choice: inputs are sampled once per clock; the ~2 ns analog overlap of the
// two registers becomes one shared clock at the hand-over.
module latch_input (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,          // latch mode selected
  input  logic [3:0] wires,       // synchronised wire inputs
  input  logic [5:0] strobe_len,  // strobe length - 1, in clocks
  output logic       stb,
  output logic [3:0] data
);
  logic [3:0] hreg [2];
  logic       sel, running;
  logic [5:0] cnt;
  logic       last;

  assign last = running && (cnt == strobe_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hreg    <= '{default: '0};
      sel     <= 1'b0;
      running <= 1'b0;
      cnt     <= '0;
      stb     <= 1'b0;
      data    <= '0;
    end else begin
      stb <= 1'b0;
      if (!en) begin
        hreg    <= '{default: '0};
        running <= 1'b0;
      end else if (last) begin
        // close the active register, switch the inputs to the other one
        stb         <= 1'b1;
        data        <= hreg[sel] | wires;
        hreg[sel]   <= '0;
        hreg[!sel]  <= hreg[!sel] | wires;
        sel         <= !sel;
        running     <= 1'b0;
        cnt         <= '0;
      end else begin
        hreg[sel] <= hreg[sel] | wires;
        if (running) cnt <= cnt + 6'd1;
        else if ((|wires) || (|hreg[sel])) begin
          running <= 1'b1;
          cnt     <= '0;
        end
      end
    end
  end
endmodule
