// setup_interface: serial setup receiver and the setup registers.
// The setup line idles high and is sampled four times per bit (sample_en
// marks the setup-clock samples). A frame is 28 bits, sent first to last:
//   2 start bits (0), 3-bit chip address, common bit, 4-bit register
//   address, 16 data bits, 2 stop bits (1).
// The first low sample starts a frame; each bit is taken from its third
// sample, near the middle of the bit. A frame with wrong start or stop bits
// is refused (frame_err). A good frame is written if its address equals the
// chip address or its common bit is set, so that settings shared by all
// chips of a board load at once. Writes are also announced (wr_stb, wr_addr,
// wr_data) for the DAC interface.
// Timing: the register changes one clock after the sample of the last stop
// bit. Reset values: standard mode, leading edges, fake triggers on.
// Paper: 10 Mbit/s, fourfold oversampling, frame layout, common address bit,
// refusal on start/stop errors. Own choices: line polarity, bit order (MSB
// first within each field), the register map (f1_pkg) and reset values.
module setup_interface
  import f1_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sample_en,
  input  logic        sdi,
  input  logic [2:0]  chip_addr,
  output logic [15:0] regs [16],
  output logic        wr_stb,
  output logic [3:0]  wr_addr,
  output logic [15:0] wr_data,
  output logic        frame_err
);
  localparam int unsigned NBITS = 28;
  logic              busy;
  logic [1:0]        sub;
  logic [4:0]        nbit;
  logic [NBITS-1:0]  sr, fr;
  logic              ok, mine;

  always_comb begin
    fr   = {sr[NBITS-2:0], sdi};     // frame once the last bit is shifted in
    ok   = (fr[27:26] == 2'b00) && (fr[1:0] == 2'b11);
    mine = (fr[25:23] == chip_addr) || fr[22];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      sub       <= '0;
      nbit      <= '0;
      sr        <= '0;
      wr_stb    <= 1'b0;
      wr_addr   <= '0;
      wr_data   <= '0;
      frame_err <= 1'b0;
      regs      <= '{default: '0};
      regs[REG_CTRL]   <= 16'h0028;   // standard mode, leading edges, fakes on
      regs[REG_WINDOW] <= 16'd256;
      regs[REG_FAKE]   <= 16'd32;
      regs[REG_STROBE] <= 16'd7;
    end else begin
      wr_stb    <= 1'b0;
      frame_err <= 1'b0;
      if (sample_en) begin
        if (!busy) begin
          if (!sdi) begin
            busy <= 1'b1;
            sub  <= 2'd1;
            nbit <= '0;
          end
        end else begin
          sub <= sub + 2'd1;
          if (sub == 2'd2) begin
            sr   <= fr;
            nbit <= nbit + 5'd1;
            if (nbit == 5'(NBITS-1)) begin
              busy <= 1'b0;
              if (!ok) frame_err <= 1'b1;
              else if (mine) begin
                wr_stb             <= 1'b1;
                wr_addr            <= fr[21:18];
                wr_data            <= fr[17:2];
                regs[fr[21:18]]    <= fr[17:2];
              end
            end
          end
        end
      end
    end
  end
endmodule
