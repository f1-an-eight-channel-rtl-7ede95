// tb_channel_input: a channel pair (even and odd) against hand-computed
// words: standard mode with leading/trailing edge selection, high
// resolution mode (sum of both relative times, stored alternately by the
// even and the odd channel), and latch mode (12 upper time bits + wires).
module tb_channel_input;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_STD;
  logic [1:0] edge_en = 2'b01;
  logic [5:0] strobe_len = 6'd1;
  logic [CUR_W-1:0] base = '0, ref_time = '0;
  logic [1:0] stb = '0, hedge = '1;
  logic [NTAPS-1:0] taps [2];
  logic [3:0] wires [2];
  logic [1:0] wr_en;
  logic [TIME_W-1:0] wr_data [2];
  int checks = 0, failures = 0;

  for (genvar c = 0; c < 2; c++) begin : g
    channel_input #(.IS_ODD(c == 1)) dut (
      .clk, .rst_n, .mode, .edge_en, .strobe_len, .base, .ref_time,
      .hit_stb(stb[c]), .hit_edge(hedge[c]), .hit_taps(taps[c]),
      .pair_stb(stb[1 - c]), .pair_taps(taps[1 - c]), .wires(wires[c]),
      .wr_en(wr_en[c]), .wr_data(wr_data[c]));
  end
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NTAPS-1:0] taps_for(int k);   // k <= 19
    logic [NTAPS-1:0] t;
    for (int i = 0; i < NTAPS; i++) t[i] = (i % 2 == 1) ^ (i < k);
    return t;
  endfunction

  // one strobe on the channels in `which`, then the clock that writes
  task automatic hit(input logic [1:0] which, input int k0, input int k1, input logic e);
    taps[0] = taps_for(k0); taps[1] = taps_for(k1);
    stb = which; hedge = {e, e};
    @(negedge clk);
    stb = '0;
  endtask

  initial begin
    wires[0] = '0; wires[1] = '0;
    taps[0] = '0; taps[1] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // standard mode: 38 * 1000 + 5 - 1234
    base = 17'(38 * 1000); ref_time = 17'd1234;
    hit(2'b01, 5, 0, 1'b1);
    check(wr_en == 2'b01 && wr_data[0] == 16'(38 * 1000 + 5 - 1234), $sformatf("std word %0d", wr_data[0]));
    // wrap of the 17-bit time below the reference
    base = 17'd100; ref_time = 17'd200;
    hit(2'b10, 0, 3, 1'b1);
    check(wr_en == 2'b10 && wr_data[1] == 16'(100 + 3 - 200), $sformatf("wrapped word %0h", wr_data[1]));
    // trailing edge refused, then accepted
    hit(2'b01, 1, 0, 1'b0);
    check(wr_en == 2'b00, "trailing edge refused");
    edge_en = 2'b10;
    hit(2'b01, 1, 0, 1'b0);
    check(wr_en == 2'b01, "trailing edge accepted");
    hit(2'b01, 1, 0, 1'b1);
    check(wr_en == 2'b00, "leading edge refused");
    edge_en = 2'b01;
    // high resolution: alternate storage of the pair sum
    mode = MODE_HIRES; base = 17'(38 * 50); ref_time = '0;
    for (int n = 0; n < 4; n++) begin
      hit(2'b11, 10, 11, 1'b1);
      check(wr_en == ((n % 2 == 0) ? 2'b01 : 2'b10), $sformatf("hires alternation %b", wr_en));
      check(wr_data[n % 2] == 16'(2 * 38 * 50 + 21), $sformatf("hires word %0d", wr_data[n % 2]));
    end
    hit(2'b01, 10, 11, 1'b1);
    check(wr_en == 2'b00, "hires needs both channels");
    // latch mode: strobe of 2 periods, word = time[15:4] and wires
    mode = MODE_LATCH; base = 17'h1_2345; ref_time = 17'h0_0100;
    wires[1] = 4'b1001;
    @(negedge clk);
    wires[1] = 4'b0000;
    repeat (3) @(negedge clk);
    check(wr_en == 2'b10 && wr_data[1] == {12'h224, 4'b1001}, $sformatf("latch word %h en %b", wr_data[1], wr_en));
    @(negedge clk);
    check(wr_en == 2'b00, "single latch word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
