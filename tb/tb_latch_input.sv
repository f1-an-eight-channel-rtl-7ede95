// tb_latch_input: checks the strobe length (preset + 1 periods after the
// first hit's next clock), the OR of all wires that fire during the strobe,
// the hand-over to the second register (a hit in the switching clock is seen
// by both strobes), and the longest strobe of 64 periods.
module tb_latch_input;
  logic clk = 0, rst_n = 0, en = 1, stb;
  logic [3:0] wires = '0, data;
  logic [5:0] strobe_len = 6'd3;
  int checks = 0, failures = 0;
  int cyc = 0, stb_cyc [$];
  logic [3:0] stb_data [$];

  latch_input dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (stb && rst_n) begin stb_cyc.push_back(cyc); stb_data.push_back(data); end
  end

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

  task automatic pulse(input logic [3:0] w);
    wires = w;
    @(negedge clk);
    wires = '0;
  endtask

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    // hit on wire 0 sampled at edge t0; counter runs t0+1 .. t0+4; wires
    // 2 and 3 inside the strobe; output one clock after the last period
    t0 = cyc + 1;
    pulse(4'b0001);
    @(negedge clk);
    pulse(4'b0100);
    pulse(4'b1000);
    repeat (10) @(negedge clk);
    check(stb_cyc.size() == 1, $sformatf("one strobe, got %0d", stb_cyc.size()));
    if (stb_cyc.size() >= 1) begin
      check(stb_data[0] == 4'b1101, $sformatf("data %b", stb_data[0]));
      check(stb_cyc[0] == t0 + 4 + 1, $sformatf("strobe end at %0d, expected %0d", stb_cyc[0], t0 + 5));
    end
    // hand-over: hit in the last strobe period appears in both strobes
    stb_cyc.delete(); stb_data.delete();
    t0 = cyc + 1;
    pulse(4'b0010);
    repeat (3) @(negedge clk);
    pulse(4'b0100);            // sampled at t0 + 4, the switching clock
    repeat (12) @(negedge clk);
    check(stb_cyc.size() == 2, $sformatf("two strobes, got %0d", stb_cyc.size()));
    if (stb_cyc.size() == 2) begin
      check(stb_data[0] == 4'b0110, $sformatf("first %b", stb_data[0]));
      check(stb_data[1] == 4'b0100, $sformatf("second %b", stb_data[1]));
      check(stb_cyc[1] - stb_cyc[0] == 5, $sformatf("second strobe %0d later", stb_cyc[1] - stb_cyc[0]));
    end
    // longest strobe: 64 periods
    stb_cyc.delete(); stb_data.delete();
    strobe_len = 6'd63;
    t0 = cyc + 1;
    pulse(4'b1000);
    repeat (80) @(negedge clk);
    check(stb_cyc.size() == 1 && stb_cyc[0] == t0 + 64 + 1, "64-period strobe");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
