// tb_time_base: checks that the coarse time grows by 38 bins per clock and
// wraps at 2^17, that Synch-Reset clears time and reference, and that
// Common start loads the reference with coarse time + fine bin.
module tb_time_base;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, synch_reset = 0, common_stb = 0;
  logic [NTAPS-1:0] common_taps = '0;
  logic [CUR_W-1:0] base, ref_time;
  int checks = 0, failures = 0;

  time_base dut (.*);
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

  // taps for fine bin k (k <= 19): first k stages switched
  function automatic logic [NTAPS-1:0] taps_for(int k);
    logic [NTAPS-1:0] t;
    for (int i = 0; i < NTAPS; i++) t[i] = (i % 2 == 1) ^ (i < k);
    return t;
  endfunction

  initial begin
    logic [CUR_W-1:0] prev, b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    prev = base;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      check(base == CUR_W'(prev + 38), $sformatf("base %0d after %0d", base, prev));
      prev = base;
    end
    check(ref_time == 0, "reference stays 0");
    // common start with fine bin 7
    common_taps = taps_for(7);
    common_stb = 1;
    b0 = base;
    @(negedge clk);
    common_stb = 0;
    check(ref_time == CUR_W'(b0 + 7), $sformatf("reference %0d, expected %0d", ref_time, b0 + 7));
    // synch reset
    synch_reset = 1;
    @(negedge clk);
    synch_reset = 0;
    check(base == 0 && ref_time == 0, "synch reset clears");
    @(negedge clk);
    check(base == 38, "counting restarts");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
