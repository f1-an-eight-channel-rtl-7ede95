// tb_fine_encoder: steps a model of the 19-stage inverting ring one stage
// flip at a time (the one stage whose output disagrees with its input) and
// checks that the encoder reports one more bin per flip, modulo 38, over
// four full turns. Also checks that a single bubble inside the thermometer
// code shifts the result by at most one bin.
module tb_fine_encoder;
  import f1_pkg::*;
  logic [NTAPS-1:0] taps;
  logic [5:0]       fine;
  int checks = 0, failures = 0;

  fine_encoder dut (.taps, .fine);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NTAPS-1:0] s;
    int expect_bin, unstable;
    // rest state: every stage the inverse of the previous one; stage 0 is
    // the one whose input (stage 18) disagrees
    for (int i = 0; i < NTAPS; i++) s[i] = (i % 2 == 1);
    expect_bin = 0;
    for (int step = 0; step < 4 * FINE_BINS; step++) begin
      taps = s;
      #1;
      check(fine == 6'(expect_bin), $sformatf("step %0d: fine %0d, expected %0d", step, fine, expect_bin));
      unstable = -1;
      for (int i = 0; i < NTAPS; i++)
        if (s[i] == s[(i + NTAPS - 1) % NTAPS]) unstable = i;
      s[unstable] = !s[unstable];
      expect_bin = (expect_bin + 1) % FINE_BINS;
    end
    // bubble: bin 10 state with tap 4 disturbed
    for (int i = 0; i < NTAPS; i++) s[i] = (i % 2 == 1) ^ (i < 10);
    s[4] = !s[4];
    taps = s;
    #1;
    check(fine == 6'd9 || fine == 6'd10 || fine == 6'd11, $sformatf("bubble: fine %0d", fine));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
