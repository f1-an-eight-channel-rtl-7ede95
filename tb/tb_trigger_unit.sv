// tb_trigger_unit: checks the window start (bits 15..5 of the trigger's
// time minus bits 15..5 of the reference time and of the latency, scaled
// back to bins), the trigger
// counter, the 4-deep FIFO with dropped triggers while the matching units
// are busy, in-order dispatch, fake triggers only after `fake_interval`
// clocks with an empty FIFO, the scaling in high resolution mode and the
// old-hit limit (latency + 4096, saturated).
module tb_trigger_unit;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0;
  mode_e mode = MODE_STD;
  logic [CUR_W-1:0] base = '0, ref_time = '0;
  logic trig_stb = 0, fake_en = 0, all_idle = 0, cmd_valid;
  logic [NTAPS-1:0] trig_taps = 19'b010_1010_1010_1010_1010;
  logic [TIME_W-1:0] offset = 16'd1000;
  logic [15:0] fake_interval = 16'd20;
  trig_cmd_t cmd;
  logic [EVT_W-1:0] trig_count;
  logic [7:0] lost;
  trig_cmd_t cmds [$];
  int cmd_cyc [$];
  int cyc = 0;
  int checks = 0, failures = 0;

  trigger_unit dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && cmd_valid) begin cmds.push_back(cmd); cmd_cyc.push_back(cyc); end
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

  function automatic logic [15:0] exp_start(int t, int r, int off, bit hires);
    logic [10:0] s;
    s = 11'((t & 32'hffff) >> 5) - 11'((r & 32'hffff) >> 5) - 11'(off >> 5);
    return hires ? {s[9:0], 6'b0} : {s, 5'b0};
  endfunction

  initial begin
    int t [6];
    repeat (2) @(negedge clk);
    rst_n = 1;
    // six triggers while the units are busy: four queued, two dropped
    for (int i = 0; i < 6; i++) begin
      base = 17'(38 * (200 + 300 * i)); ref_time = 17'd77;
      trig_taps = 19'b010_1010_1010_1010_1010;  // fine bin 0
      t[i] = 38 * (200 + 300 * i);
      trig_stb = 1;
      @(negedge clk);
      trig_stb = 0;
    end
    check(trig_count == 6'd6, $sformatf("trigger counter %0d", trig_count));
    check(lost == 8'd2, $sformatf("dropped %0d", lost));
    check(cmds.size() == 0, "nothing dispatched while busy");
    all_idle = 1;
    repeat (12) @(negedge clk);
    check(cmds.size() == 4, $sformatf("%0d commands", cmds.size()));
    for (int i = 0; i < 4 && i < cmds.size(); i++) begin
      check(!cmds[i].fake && cmds[i].evt == 6'(i), $sformatf("command %0d evt %0d", i, cmds[i].evt));
      check(cmds[i].start == exp_start(t[i], 77, 1000, 0), $sformatf("start %0d vs %0d", cmds[i].start, exp_start(t[i], 77, 1000, 0)));
      check(cmds[i].limit == 16'(992 + 4096), $sformatf("old-hit limit %0d", cmds[i].limit));
    end
    if (cmd_cyc.size() == 4) check(cmd_cyc[1] - cmd_cyc[0] == 2, "one command every other clock");
    // fake triggers: none while disabled, then one per interval
    cmds.delete(); cmd_cyc.delete();
    repeat (30) @(negedge clk);
    check(cmds.size() == 0, "no fake trigger while disabled");
    fake_en = 1; base = 17'(38 * 3000); ref_time = '0;
    repeat (45) @(negedge clk);
    check(cmds.size() == 2, $sformatf("%0d fake triggers in 45 clocks", cmds.size()));
    if (cmds.size() >= 1) begin
      check(cmds[0].fake, "fake flag");
      check(cmds[0].start == exp_start(38 * 3000, 0, 1000, 0), "fake start from current time");
    end
    // a real trigger takes precedence, high resolution scaling
    fake_en = 0; cmds.delete();
    mode = MODE_HIRES;
    trig_stb = 1;
    @(negedge clk);
    trig_stb = 0;
    repeat (4) @(negedge clk);
    check(cmds.size() == 1 && cmds[0].start == exp_start(38 * 3000, 0, 1000, 1) && cmds[0].evt == 6'd6,
          "high resolution start and counter");
    if (cmds.size() == 1) check(cmds[0].limit == 16'(2 * 992 + 4096), "high resolution old-hit limit");
    // the limit saturates for a latency near the full range
    offset = 16'hff00; cmds.delete();
    trig_stb = 1;
    @(negedge clk);
    trig_stb = 0;
    repeat (4) @(negedge clk);
    check(cmds.size() == 1 && cmds[0].limit == 16'hffff, "saturated old-hit limit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
