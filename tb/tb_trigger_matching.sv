// tb_trigger_matching: one matching unit on a real hit buffer. A list of
// hit times is written; for each trigger the expected copies are worked out
// from the list (hits with 0 <= hit - start < window, from the first one
// not deleted; older means more than 2^15 before the start here), and the unit's readout writes, its start-search pointer and
// its timing (one hit per clock) are compared. Covers deletion of old hits,
// overlapping windows (hits copied twice), a fake trigger (nothing copied,
// old hits deleted), a stall on a full readout buffer, and latch mode.
module tb_trigger_matching;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0;
  logic latch_mode = 0, start = 0, idle, ro_full = 0;
  logic [TIME_W-1:0] window = 16'd100;
  trig_cmd_t cmd = '0;
  logic hb_wr = 0, ssp_load, hb_full, ro_wr;
  logic [TIME_W-1:0] hb_wdata = '0, rd_data;
  logic [4:0] rd_ptr, wp, ssp, ssp_next;
  logic [7:0] lost;
  ro_word_t ro_data;
  ro_word_t got [$];
  int checks = 0, failures = 0;
  int busy_cycles;

  hit_buffer hb (.clk, .rst_n, .wr_en(hb_wr), .wr_data(hb_wdata), .rd_ptr,
                 .rd_data, .ssp_load, .ssp_next, .wp, .ssp, .full(hb_full), .lost);
  trigger_matching dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && ro_wr && !ro_full) got.push_back(ro_data);
  always @(posedge clk) if (rst_n && !idle) busy_cycles++;

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

  logic [15:0] hits [$];
  int first;   // index of the oldest hit not yet deleted (model)

  task automatic put(input logic [15:0] t);
    hb_wr = 1; hb_wdata = t; hits.push_back(t);
    @(negedge clk);
    hb_wr = 0;
  endtask

  // run one trigger and compare with the model
  task automatic trigger(input logic [15:0] st, input logic fake, input logic [5:0] evt);
    logic [15:0] exp [$];
    int new_first, n;
    logic matched;
    exp.delete(); new_first = first; matched = 0;
    for (int i = first; i < hits.size(); i++) begin
      logic [15:0] h, d;
      h = latch_mode ? {hits[i][15:4], 4'b0} : hits[i];
      d = h - st;
      if (d[15]) begin if (!matched) new_first = i + 1; end
      else if (d < window) begin matched = 1; exp.push_back(hits[i]); end
      else break;
    end
    got.delete(); busy_cycles = 0;
    cmd = '{fake: fake, evt: evt, start: st, limit: 16'h8000};
    start = 1;
    @(negedge clk);
    start = 0;
    wait (idle);
    @(negedge clk);
    n = fake ? 0 : exp.size() + 1;
    check(got.size() == n, $sformatf("start %0d: %0d words, expected %0d", st, got.size(), n));
    for (int i = 0; i < exp.size() && i < got.size() && !fake; i++)
      check(!got[i].marker && got[i].data == exp[i], $sformatf("copy %0d: %0d vs %0d", i, got[i].data, exp[i]));
    if (!fake && got.size() == n)
      check(got[n-1].marker && got[n-1].data[5:0] == evt, "end marker with trigger number");
    check(ssp == 5'(new_first), $sformatf("start-search pointer %0d, expected %0d", ssp, new_first));
    first = new_first;
  endtask

  initial begin
    int t_search;
    first = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 12; i++) put(16'(1000 + 40 * i));   // 1000 .. 1440
    // window 1100..1199: hits 1120, 1160; 1000..1080 deleted
    trigger(16'd1100, 1'b0, 6'd1);
    // overlapping window 1150..1249 finds 1160 again
    trigger(16'd1150, 1'b0, 6'd2);
    // timing: 1 clock to load, one per hit visited, 1 for the marker
    check(busy_cycles <= 1 + 4 + 1 + 1, $sformatf("busy %0d clocks", busy_cycles));
    // fake trigger at 1300: nothing copied, hits before 1320 deleted
    trigger(16'd1300, 1'b1, 6'd0);
    // window beyond every hit: all remaining deleted, only a marker
    trigger(16'd2000, 1'b0, 6'd3);
    check(ssp == wp, "buffer emptied");
    // stall on a full readout buffer
    for (int i = 0; i < 4; i++) put(16'(3000 + 10 * i));
    fork
      trigger(16'd2990, 1'b0, 6'd4);
      begin
        ro_full = 1;
        repeat (6) @(negedge clk);
        check(got.size() == 0 && !idle, "stalled while readout buffer full");
        ro_full = 0;
      end
    join
    // latch mode: wire bits do not count as time
    latch_mode = 1;
    put(16'h1003); put(16'h1057); put(16'h10a1);
    window = 16'h0060;
    trigger(16'h1000, 1'b0, 6'd5);
    check(got.size() == 3, "latch window 0x1000..0x105f holds two words");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
