// tb_dac_interface: loads the eight bytes through setup writes, starts a
// download and decodes the 3-wire stream (data taken at the rising clock,
// word closed by the load pulse). Each of the eight 12-bit words must hold
// the DAC address 1..8 and its byte. A second download, without new
// writes, must send the same values.
module tb_dac_interface;
  logic clk = 0, rst_n = 0, wr_stb = 0;
  logic [3:0] wr_addr = '0;
  logic [15:0] wr_data = '0;
  logic [7:0] dac_val [8];
  logic dac_sdi, dac_clk, dac_ld, busy;
  logic prev_clk = 0, prev_ld = 0;
  logic [11:0] sh = '0;
  int nbits = 0;
  logic [11:0] words [$];
  logic [7:0] val [8];
  int checks = 0, failures = 0;

  dac_interface dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (dac_clk && !prev_clk) begin sh = {sh[10:0], dac_sdi}; nbits++; end
    if (dac_ld && !prev_ld) begin
      if (nbits == 12) words.push_back(sh);
      else begin failures++; $display("FAIL: load after %0d bits", nbits); end
      nbits = 0;
    end
    prev_clk = dac_clk; prev_ld = dac_ld;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(input logic [3:0] a, input logic [15:0] d);
    wr_stb = 1; wr_addr = a; wr_data = d;
    @(negedge clk);
    wr_stb = 0;
  endtask

  initial begin
    foreach (val[i]) val[i] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4; i++) write(4'(8 + i), {val[2 * i + 1], val[2 * i]});
    for (int round = 0; round < 2; round++) begin
      words.delete();
      write(4'd12, 16'h0);
      repeat (3) @(negedge clk);
      check(busy, "busy during download");
      wait (!busy);
      repeat (4) @(negedge clk);
      check(words.size() == 8, $sformatf("%0d words", words.size()));
      foreach (words[i])
        check(words[i] == {4'(i + 1), val[i]}, $sformatf("word %0d = %h", i, words[i]));
    end
    foreach (val[i]) check(dac_val[i] == val[i], "stored byte");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
