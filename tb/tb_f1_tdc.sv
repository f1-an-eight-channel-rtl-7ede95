// tb_f1_tdc: end-to-end test of the whole TDC at its default sizes.
// The chip is set up through its serial port; hits and triggers are given as
// latched delay-chain taps, the readout bus is collected (token looped back
// from token_out to token_in) and every word is compared with a model that
// works from the hit and trigger times alone: an event holds, channel by
// channel, the hits h with 0 <= h - start < window, start being bits 15..5
// of the trigger's time, minus the same bits of the reference time and of the
// latency. Phases:
//   1 standard mode, Common start reference, random hits and triggers,
//     overlapping windows
//   2 no triggers: fake triggers must keep the hit buffers from overflowing
//   3 a burst of 20 hits on one channel: 4 lost in the full hit buffer
//   4 readout bus blocked: readout buffers fill, matching stalls, the
//     trigger FIFO overflows and drops triggers; then everything drains
//   5 high resolution mode (pair sums in half bins, alternate storage)
//   6 latch mode (wire patterns with coarse time)
//   7 8-bit readout mode
// plus a DAC download. Each mechanism is counted; one that never happened
// counts as a failure.
module tb_f1_tdc;
  import f1_pkg::*;
  localparam int OFFSET = 2000, WINDOW = 1000, FAKE = 300, STROBE = 3;

  logic clk = 0, rst_n = 0;
  logic [NCH-1:0] hit_stb = '0, hit_edge = '1;
  logic [NCH-1:0][NTAPS-1:0] hit_taps = '0;
  logic [4*NCH-1:0] latch_in = '0;
  logic trig_stb = 0, synch_reset = 0, common_stb = 0;
  logic [NTAPS-1:0] trig_taps = '0, common_taps = '0;
  logic setup_sample_en = 1, setup_in = 1;
  logic [2:0] chip_addr = 3'd6;
  logic token_in, token_out, bus_we, data_ready;
  logic [IF_W-1:0] data_out;
  logic dac_sdi, dac_clk, dac_ld;
  logic [5:0] input_delay;
  logic [3:0] bus_skew;
  logic [EVT_W-1:0] trig_count;
  logic [7:0] trig_lost;
  logic [NCH-1:0][7:0] hits_lost;
  logic setup_err;

  f1_tdc dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, shown = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (shown++ < 20) $display("%0t FAIL: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  function automatic logic [NTAPS-1:0] taps_for(int k);   // fine bin 0..37
    logic [NTAPS-1:0] t;
    for (int i = 0; i < NTAPS; i++)
      t[i] = (i % 2 == 1) ^ ((k <= 19) ? (i < k) : (i >= k - 19));
    return t;
  endfunction

  task automatic setup(input logic [3:0] r, input logic [15:0] d);
    logic [27:0] f;
    f = {2'b00, chip_addr, 1'b0, r, d, 2'b11};
    for (int i = 27; i >= 0; i--) begin
      setup_in = f[i];
      repeat (4) @(negedge clk);
    end
    setup_in = 1;
    repeat (4) @(negedge clk);
  endtask

  // ------------------------------------------------------------ time model
  logic [16:0] refv = '0;          // reference time known to the model
  mode_e       mmode = MODE_STD;
  bit          mbyte = 0;          // 8-bit readout
  int          window = WINDOW;
  int          offset = OFFSET;
  logic [15:0] hits [NCH][$];      // stored hit words per channel
  int          nmatch [NCH][$];    // how many events each hit was in
  bit          toggle [NCH/2];
  logic [IF_W-1:0] expq [$];
  int n_overlap = 0, n_events_exp = 0;

  function automatic logic [15:0] rel(int k);
    return 16'(dut.base + 17'(k) - refv);
  endfunction

  // model of one trigger's event, built when the trigger is given
  task automatic model_event(input logic [16:0] tcur, input logic [5:0] evt);
    logic [10:0] s11;
    logic [15:0] s, d, h, lim;
    s11 = tcur[15:5] - refv[15:5] - 11'(offset >> 5);
    s = (mmode == MODE_HIRES) ? {s11[9:0], 6'b0} : {s11, 5'b0};
    // a hit further than latency + 4096 units after the start is older
    lim = (mmode == MODE_HIRES) ? 16'(2 * (offset >> 5) * 32 + 4096) : 16'((offset >> 5) * 32 + 4096);
    // hits older than the window start ahead of the first match are
    // deleted, as in the chip; the model forgets them too
    for (int c = 0; c < NCH; c++)
      while (hits[c].size() > 0) begin
        h = (mmode == MODE_LATCH) ? {hits[c][0][15:4], 4'b0} : hits[c][0];
        d = h - s;
        if (d < lim) break;
        void'(hits[c].pop_front());
        void'(nmatch[c].pop_front());
      end
    for (int c = 0; c < NCH; c++)
      foreach (hits[c][i]) begin
        h = (mmode == MODE_LATCH) ? {hits[c][i][15:4], 4'b0} : hits[c][i];
        d = h - s;
        if (d < lim && d < 16'(window)) begin
          expq.push_back({chip_addr, 1'b0, 3'(c), 1'b0, hits[c][i]});
          nmatch[c][i]++;
          if (nmatch[c][i] == 2) n_overlap++;
        end
      end
    expq.push_back({chip_addr, 1'b1, 14'b0, evt});
    n_events_exp++;
  endtask

  task automatic clear_model();
    for (int c = 0; c < NCH; c++) begin hits[c].delete(); nmatch[c].delete(); end
  endtask

  // drive one clock of hits: mask of channels, each with a random fine bin
  task automatic hit_cycle(input logic [NCH-1:0] m);
    int k;
    for (int c = 0; c < NCH; c++) if (m[c]) begin
      k = $urandom_range(0, 37);
      hit_taps[c] = taps_for(k);
      hits[c].push_back(rel(k));
      nmatch[c].push_back(0);
    end
    hit_stb = m;
  endtask

  // a trigger in this clock; returns whether the FIFO takes it
  task automatic trigger_cycle();
    int k;
    bit dropped;
    k = $urandom_range(0, 37);
    trig_taps = taps_for(k);
    trig_stb = 1;
    dropped = dut.u_trig.f_full;
    if (!dropped) model_event(dut.base + 17'(k), trig_count);
  endtask

  // one clock of random traffic: hits with probability 1/p per channel
  task automatic traffic(input int p, input bit trig);
    logic [NCH-1:0] m;
    for (int c = 0; c < NCH; c++) m[c] = ($urandom_range(1, p) == 1);
    hit_cycle(m);
    if (trig) trigger_cycle();
    @(negedge clk);
    hit_stb = '0; trig_stb = 0;
  endtask

  task automatic quiet(input int n);
    repeat (n) @(negedge clk);
  endtask

  // ------------------------------------------------------------ readout bus
  bit tok_en = 1, tok_pending = 0;
  logic tok_q = 0;
  assign token_in = tok_q;
  logic [IF_W-1:0] asm_w;
  int nbyte = 0, n_words = 0, n_trailers = 0, n_bytes = 0;
  int n_hires = 0, n_latch = 0, n_tok_empty = 0;
  always @(posedge clk) begin
    if (!rst_n) tok_q <= 0;
    else begin
      if (token_out) tok_pending = 1;
      if (token_out && !bus_we) n_tok_empty++;
      tok_q <= tok_pending && tok_en;
      if (tok_pending && tok_en) tok_pending = 0;
      if (bus_we) begin
        if (mbyte) begin
          asm_w = {asm_w[15:0], data_out[7:0]};
          n_bytes++;
          nbyte++;
        end else begin
          asm_w = data_out;
          nbyte = 3;
        end
        if (nbyte == 3) begin
          nbyte = 0;
          n_words++;
          check(expq.size() > 0 && asm_w == expq[0],
                $sformatf("bus word %h, expected %h", asm_w, (expq.size() > 0) ? expq[0] : 24'h0));
          if (expq.size() > 0) void'(expq.pop_front());
          if (asm_w[20]) n_trailers++;
          else if (mmode == MODE_HIRES) n_hires++;
          else if (mmode == MODE_LATCH) n_latch++;
        end
      end
    end
  end

  // ------------------------------------------------------ mechanism counters
  int n_fake = 0, n_delete = 0, n_stall = 0, n_dac = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_trig.cmd_valid && dut.u_trig.cmd.fake) n_fake++;
  end
  logic ld_q = 0;
  always @(posedge clk) begin ld_q <= dac_ld; if (dac_ld && !ld_q) n_dac++; end
  for (genvar c = 0; c < NCH; c++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_ch[c].ssp_load) n_delete++;
      if (dut.g_ch[c].ro_full && !dut.g_ch[c].u_match.idle) n_stall++;
    end
  end

  task automatic drain(input int limit);
    int n;
    n = 0;
    while ((expq.size() > 0) && n < limit) begin @(negedge clk); n++; end
    check(expq.size() == 0, $sformatf("%0d expected words never read out", expq.size()));
    expq.delete();
  endtask

  task automatic new_mode(input logic [15:0] ctrl, input int win);
    drain(3000);
    quiet(600);                        // let fake triggers empty the buffers
    setup(REG_CTRL, ctrl);
    setup(REG_WINDOW, 16'(win));
    window = win;
    mmode = mode_e'(ctrl[1:0]);
    mbyte = ctrl[2];
    synch_reset = 1;
    @(negedge clk);
    synch_reset = 0;
    refv = '0;
    clear_model();
    toggle = '{default: 0};
  endtask

  // ------------------------------------------------------------------ test
  initial begin
    int lost0, tl0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    tok_pending = 1;                   // first token on the bus
    setup(REG_OFFSET, 16'(OFFSET));
    setup(REG_WINDOW, 16'(WINDOW));
    setup(REG_FAKE, 16'(FAKE));
    setup(REG_STROBE, 16'(STROBE));
    setup(REG_DELAY, 16'd32);
    check(input_delay == 6'd32 && !setup_err, "setup registers");
    // DAC values and a download
    setup(4'd8, 16'h2211); setup(4'd9, 16'h4433);
    setup(4'd10, 16'h6655); setup(4'd11, 16'h8877);
    setup(REG_DAC_LOAD, 16'h0);

    // ---- phase 1: standard mode with a Common start reference
    synch_reset = 1; @(negedge clk); synch_reset = 0;
    quiet(10);
    begin
      int k; k = 17;
      common_taps = taps_for(k);
      common_stb = 1;
      refv = dut.base + 17'(k);
      @(negedge clk);
      common_stb = 0;
    end
    clear_model();
    for (int t = 0; t < 30; t++) begin
      int gap;
      gap = (t % 5 == 4) ? 12 : $urandom_range(40, 90);   // some windows overlap
      repeat (gap) traffic(20, 0);
      traffic(20, 1);
    end
    repeat (100) traffic(20, 0);
    drain(3000);
    check(hits_lost == '0, "no hit lost in phase 1");

    // ---- phase 2: no triggers for a long time, fake triggers clean up
    lost0 = n_fake;
    repeat (3000) traffic(60, 0);
    check(hits_lost == '0, "fake triggers kept the hit buffers from filling");
    check(n_fake - lost0 >= 5, $sformatf("%0d fake triggers", n_fake - lost0));

    // ---- phase 3: hit buffer overflow on channel 3
    quiet(600);
    clear_model();
    for (int i = 0; i < 20; i++) begin hit_cycle(8'b0000_1000); @(negedge clk); hit_stb = '0; end
    @(negedge clk);
    check(hits_lost[3] == 8'd4, $sformatf("channel 3 lost %0d hits", hits_lost[3]));
    clear_model();
    quiet(800);

    // ---- phase 4: bus blocked: stall and trigger FIFO overflow
    tok_en = 0;
    tl0 = int'(trig_lost);
    for (int i = 0; i < 12; i++) begin hit_cycle('1); @(negedge clk); hit_stb = '0; @(negedge clk); end
    quiet(OFFSET / 38 - 20);
    for (int i = 0; i < 7; i++) begin trigger_cycle(); @(negedge clk); trig_stb = 0; @(negedge clk); end
    quiet(200);
    check(int'(trig_lost) - tl0 == 2, $sformatf("%0d triggers dropped", int'(trig_lost) - tl0));
    tok_en = 1;
    drain(5000);

    // ---- phase 5: high resolution mode (pairs 0/1 .. 6/7), window in half bins
    new_mode(16'h0029, 2 * WINDOW);
    for (int t = 0; t < 6; t++) begin
      repeat ($urandom_range(30, 50)) begin
        for (int p = 0; p < NCH / 2; p++) begin
          if ($urandom_range(1, 10) == 1) begin
            int h, ke, ko;
            logic [15:0] re, ro;
            h  = $urandom_range(0, 75);           // half bins within 38 bins
            ke = h / 2; ko = (h + 1) / 2;
            re = rel(ke); ro = rel(ko);
            if (ko == 38) ko = 37;                // stays within this clock
            ro = rel(ko);
            hit_taps[2 * p] = taps_for(ke);
            hit_taps[2 * p + 1] = taps_for(ko);
            hit_stb[2 * p +: 2] = 2'b11;
            hits[2 * p + toggle[p]].push_back(re + ro);
            nmatch[2 * p + toggle[p]].push_back(0);
            toggle[p] = !toggle[p];
          end
        end
        @(negedge clk);
        hit_stb = '0;
      end
      trigger_cycle(); @(negedge clk); trig_stb = 0;
    end
    quiet(100);

    // ---- phase 6: latch mode, 32 wires
    new_mode(16'h002A, 2 * WINDOW);
    for (int t = 0; t < 6; t++) begin
      repeat (3) begin
        int c;
        logic [3:0] w;
        logic [16:0] b;
        c = $urandom_range(0, NCH - 1);
        w = 4'($urandom_range(1, 15));
        b = dut.base;
        latch_in[4 * c +: 4] = w;
        @(negedge clk);
        latch_in = '0;
        begin
          logic [15:0] tt;
          tt = 16'(b + 17'(38 * (STROBE + 2)) - refv);
          hits[c].push_back({tt[15:4], w});
          nmatch[c].push_back(0);
        end
        quiet(STROBE + 3);
      end
      quiet(OFFSET / 38 - 30);
      trigger_cycle(); @(negedge clk); trig_stb = 0;
      quiet(20);
    end

    // ---- phase 7: 8-bit readout, standard mode
    new_mode(16'h002C, WINDOW);
    for (int t = 0; t < 8; t++) begin
      repeat ($urandom_range(40, 90)) traffic(20, 0);
      traffic(20, 1);
    end
    repeat (60) traffic(20, 0);
    drain(5000);

    // ---- summary of mechanisms
    check(n_trailers == n_events_exp, $sformatf("%0d events read, %0d expected", n_trailers, n_events_exp));
    check(n_overlap > 0,    "overlapping windows");
    check(n_delete > 0,     "old hits deleted");
    check(n_fake > 0,       "fake triggers");
    check(n_stall > 0,      "matching stalled on a full readout buffer");
    check(trig_lost > 0,    "trigger FIFO overflow");
    check(hits_lost[3] > 0, "hit buffer overflow");
    check(n_hires > 0,      "high resolution words");
    check(n_latch > 0,      "latch words");
    check(n_bytes > 0,      "8-bit readout");
    check(n_tok_empty > 0,  "token passed without data");
    check(n_dac == 8,       $sformatf("%0d DAC words", n_dac));
    $display("events %0d words %0d overlap %0d deleted %0d fake %0d stall %0d trig_lost %0d hits_lost %0d hires %0d latch %0d bytes %0d token_empty %0d dac %0d",
             n_trailers, n_words, n_overlap, n_delete, n_fake, n_stall, trig_lost, hits_lost[3],
             n_hires, n_latch, n_bytes, n_tok_empty, n_dac);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
