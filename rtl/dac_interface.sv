// dac_interface: stores eight 1-byte threshold values and downloads them to
// an octal 8-bit DAC (AD8842) over a 3-wire serial link (data, clock, load).
// Setup writes to registers 8..11 fill the bytes (low byte = even DAC);
// a write to register 12 sends all eight, and can be repeated at any time
// without reloading the values. Each DAC gets a 12-bit word, MSB first: a
// 4-bit address (1..8 for DAC 1..8) and the 8-bit value. Data change while
// dac_clk is low and are taken by the DAC on its rising edge; after the 12th
// bit dac_ld pulses high to move the word into the DAC's output register.
// Each dac_clk phase lasts HALF clocks. The download runs on its own and
// does not disturb time measurement. A load request during a download is
// remembered and served after it.
// Timing: one word takes (24 + 1) * HALF clocks plus one clock.
// Paper: eight 1-byte registers, formatting and sending to the AD8842, 3
// output wires, repeated downloads. Own choices: register numbers, the
// word format, polarity and speed (taken from the DAC's usual serial format,
// not from the paper).
module dac_interface #(
  parameter int unsigned HALF = 4   // clocks per dac_clk phase
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr_stb,
  input  logic [3:0]  wr_addr,
  input  logic [15:0] wr_data,
  output logic [7:0]  dac_val [8],
  output logic        dac_sdi,
  output logic        dac_clk,
  output logic        dac_ld,
  output logic        busy
);
  localparam int unsigned CW = $clog2(HALF + 1);
  logic          pending;
  logic [2:0]    idx;
  logic [3:0]    nbit;     // 0..11 data bits, 12 = load pulse
  logic          phase;    // 0 = clock low, 1 = clock high
  logic [CW-1:0] cnt;
  logic [11:0]   word;

  always_comb word = {4'(idx) + 4'd1, dac_val[idx]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dac_val <= '{default: '0};
      pending <= 1'b0;
      busy    <= 1'b0;
      idx     <= '0;
      nbit    <= '0;
      phase   <= 1'b0;
      cnt     <= '0;
      dac_sdi <= 1'b0;
      dac_clk <= 1'b0;
      dac_ld  <= 1'b0;
    end else begin
      if (wr_stb && wr_addr >= 4'd8 && wr_addr <= 4'd11) begin
        dac_val[{wr_addr[1:0], 1'b0}] <= wr_data[7:0];
        dac_val[{wr_addr[1:0], 1'b1}] <= wr_data[15:8];
      end
      if (wr_stb && wr_addr == 4'd12) pending <= 1'b1;

      if (!busy) begin
        dac_sdi <= 1'b0;
        dac_clk <= 1'b0;
        dac_ld  <= 1'b0;
        if (pending) begin
          pending <= 1'b0;
          busy    <= 1'b1;
          idx     <= '0;
          nbit    <= '0;
          phase   <= 1'b0;
          cnt     <= '0;
        end
      end else begin
        dac_sdi <= (nbit < 4'd12) ? word[4'd11 - nbit] : 1'b0;
        dac_clk <= (nbit < 4'd12) && phase;
        dac_ld  <= (nbit == 4'd12) && !phase;
        if (cnt == CW'(HALF - 1)) begin
          cnt <= '0;
          if (nbit == 4'd12) begin
            nbit  <= '0;
            phase <= 1'b0;
            idx   <= idx + 3'd1;
            if (idx == 3'd7) busy <= 1'b0;
          end else if (phase) begin
            phase <= 1'b0;
            nbit  <= nbit + 4'd1;
          end else phase <= 1'b1;
        end else cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
