// io_interface: puts the interface FIFO on the front-end data bus, 24 bits
// per clock or as three bytes for a HOTLink serializer, under a circulating
// token shared by all chips on the bus.
// A chip that receives the token (token_in pulse) keeps it while it sends
// one whole event (up to and including the trailer word) if one is ready,
// and passes it on (token_out pulse) otherwise. token_out is raised together
// with the last bus write, so the next chip can drive the bus on the
// following clock without a wait state. bus_we marks every valid bus word
// or byte. In 8-bit mode bytes go out most significant first on data_out[7:0].
// Timing: the token is looked at in the clock it arrives. With an event
// ready, the first word (or byte) is on the bus in the next clock, the FIFO
// being read in the token clock itself; otherwise token_out follows in the
// next clock. So the bus carries no idle clock between the last word of one
// chip and the first of the next. 24-bit mode: one word per clock; 8-bit
// mode: one byte per clock.
// Paper: token-controlled readout without wait states at the hand-over, 8
// or 24 bit readout, bus write enable. Own choices: one event per token
// visit, byte order, the single clock (the chip's bus clock, up to 50 MHz,
// is separate).
module io_interface
  import f1_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            mode8,        // 1 = 8-bit (HOTLink) readout
  input  logic            token_in,
  output logic            token_out,
  input  logic            data_ready,
  input  logic            empty,
  input  logic [IF_W-1:0] rdata,
  output logic            rd,
  output logic [IF_W-1:0] data_out,
  output logic            bus_we
);
  typedef enum logic [1:0] {T_IDLE, T_SEND, T_BYTES} state_e;
  state_e          state;
  logic [IF_W-1:0] sh;
  logic [1:0]      nbyte;
  logic            last_word;
  logic            send;        // a word is taken from the FIFO this clock

  always_comb begin
    send = ((state == T_SEND) || (state == T_IDLE && token_in && data_ready)) && !empty;
    rd   = send;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= T_IDLE;
      token_out <= 1'b0;
      data_out  <= '0;
      bus_we    <= 1'b0;
      sh        <= '0;
      nbyte     <= '0;
      last_word <= 1'b0;
    end else begin
      token_out <= 1'b0;
      bus_we    <= 1'b0;
      if (state == T_IDLE && token_in && !data_ready) token_out <= 1'b1;  // nothing to send
      else if (state == T_IDLE && token_in) state <= T_SEND;
      if (send) begin
        bus_we <= 1'b1;
        if (mode8) begin
          data_out  <= {16'b0, rdata[23:16]};
          sh        <= rdata;
          nbyte     <= 2'd1;
          last_word <= rdata[20];
          state     <= T_BYTES;
        end else begin
          data_out <= rdata;
          if (rdata[20]) begin
            token_out <= 1'b1;
            state     <= T_IDLE;
          end else state <= T_SEND;
        end
      end else if (state == T_BYTES) begin
        data_out <= {16'b0, (nbyte == 2'd1) ? sh[15:8] : sh[7:0]};
        bus_we   <= 1'b1;
        nbyte    <= nbyte + 2'd1;
        if (nbyte == 2'd2) begin
          if (last_word) begin
            token_out <= 1'b1;
            state     <= T_IDLE;
          end else state <= T_SEND;
        end
      end
    end
  end

  // bus rules: the FIFO is read only when it holds a word, and the bus is
  // driven only during a token visit
  a_rd_not_empty: assert property (@(posedge clk) disable iff (!rst_n) rd |-> !empty);
  a_we_in_visit:  assert property (@(posedge clk) disable iff (!rst_n) bus_we |-> $past(state) != T_IDLE || $past(token_in));
endmodule
