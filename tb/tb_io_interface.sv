// tb_io_interface: a queue stands in for the interface FIFO. Checks that a
// token without a ready event is passed on at once, that with the token an
// event goes out word by word (24-bit mode) or byte by byte, most
// significant first (8-bit mode), with bus_we on every transfer and no gap,
// that token_out comes with the last transfer of the event, and that there
// is no wait state: a token without data leaves one clock after it came,
// and a ready event's first transfer is on the bus one clock after the token.
module tb_io_interface;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, mode8 = 0, token_in = 0, token_out, rd, bus_we;
  logic data_ready, empty;
  logic [IF_W-1:0] rdata, data_out;
  logic [IF_W-1:0] q [$];
  int checks = 0, failures = 0;
  int cyc = 0;
  logic [23:0] bus [$];
  int bus_cyc [$], tok_cyc [$], tin_cyc [$];

  io_interface dut (.*);
  always #5 clk = ~clk;
  always_comb begin
    empty = (q.size() == 0);
    rdata = empty ? '0 : q[0];
    data_ready = 0;
    foreach (q[i]) if (q[i][20]) data_ready = 1;
  end
  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      if (rd && q.size() > 0) void'(q.pop_front());
      if (bus_we) begin bus.push_back(data_out); bus_cyc.push_back(cyc); end
      if (token_out) tok_cyc.push_back(cyc);
      if (token_in) tin_cyc.push_back(cyc);
    end
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

  task automatic give_token();
    token_in = 1;
    @(negedge clk);
    token_in = 0;
  endtask

  initial begin
    logic [23:0] ev [3];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // no data: token passed straight on
    give_token();
    repeat (4) @(negedge clk);
    check(tok_cyc.size() == 1 && bus.size() == 0, "token passed without data");
    check(tok_cyc.size() == 1 && tin_cyc.size() == 1 && tok_cyc[0] == tin_cyc[0] + 1, "token passed on in the next clock");
    // an incomplete event does not leave
    q.push_back(24'hA01234);
    give_token();
    repeat (4) @(negedge clk);
    check(bus.size() == 0 && tok_cyc.size() == 2, "incomplete event held back");
    // 24-bit mode: three words, token with the last
    ev[0] = 24'hA21234; ev[1] = 24'hA4BEEF; ev[2] = 24'hB0002A;   // last is a trailer
    q.delete(); foreach (ev[i]) q.push_back(ev[i]);
    tok_cyc.delete(); tin_cyc.delete();
    give_token();
    repeat (6) @(negedge clk);
    check(bus_cyc.size() > 0 && tin_cyc.size() == 1 && bus_cyc[0] == tin_cyc[0] + 1, "first word one clock after the token");
    check(bus.size() == 3, $sformatf("%0d words", bus.size()));
    foreach (ev[i]) if (i < bus.size()) check(bus[i] == ev[i], $sformatf("word %0d %h", i, bus[i]));
    if (bus.size() == 3) check(bus_cyc[2] - bus_cyc[0] == 2, "one word per clock");
    check(tok_cyc.size() == 1 && bus_cyc.size() == 3 && tok_cyc[0] == bus_cyc[2], "token with the last word");
    // 8-bit mode
    mode8 = 1; bus.delete(); bus_cyc.delete(); tok_cyc.delete(); tin_cyc.delete();
    foreach (ev[i]) q.push_back(ev[i]);
    give_token();
    repeat (14) @(negedge clk);
    check(bus_cyc.size() > 0 && tin_cyc.size() == 1 && bus_cyc[0] == tin_cyc[0] + 1, "first byte one clock after the token");
    check(bus.size() == 9, $sformatf("%0d bytes", bus.size()));
    for (int i = 0; i < 9 && i < bus.size(); i++)
      check(bus[i] == {16'b0, ev[i / 3][23 - 8 * (i % 3) -: 8]}, $sformatf("byte %0d %h", i, bus[i]));
    if (bus.size() == 9) check(bus_cyc[8] - bus_cyc[0] == 8, "one byte per clock");
    check(tok_cyc.size() == 1 && bus_cyc.size() == 9 && tok_cyc[0] == bus_cyc[8], "token with the last byte");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
