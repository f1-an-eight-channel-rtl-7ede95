// tb_readout_buffer: random writes and reads against a queue model,
// checking order, full/empty flags and the count of complete events.
module tb_readout_buffer;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, wr = 0, rd = 0, full, empty;
  ro_word_t wdata = '0, rdata;
  logic [3:0] events;
  ro_word_t model [$];
  int nev = 0;
  int checks = 0, failures = 0;

  readout_buffer dut (.*);
  always #5 clk = ~clk;

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

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      check(full == (model.size() == 8) && empty == (model.size() == 0), "flags");
      check(events == 4'(nev), $sformatf("events %0d vs %0d", events, nev));
      if (model.size() > 0) check(rdata == model[0], "head word");
      wr = (n % 500 < 250) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      wr = wr && !full;
      rd = ($urandom_range(0, 1) == 1) && !empty;
      wdata = '{marker: ($urandom_range(0, 4) == 0), data: 16'($urandom)};
      @(posedge clk);
      #1;
      if (rd) begin if (model[0].marker) nev--; void'(model.pop_front()); end
      if (wr) begin model.push_back(wdata); if (wdata.marker) nev++; end
      wr = 0; rd = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
