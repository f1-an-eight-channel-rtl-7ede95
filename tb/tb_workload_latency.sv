// tb_workload_latency: the design under the load it was made for: 6 million
// hits per second per chip (0.75 MHz per channel, or 1.5 MHz per channel
// pair in high resolution mode), triggers at 100 kHz, a trigger latency near
// the limit of the 16-bit time (8.7 us standard, 4.35 us high resolution, at
// 150 ps bins and a 5.7 ns coarse clock) and a 300 ns window. Fake triggers
// every 20 clocks keep the hit buffers clean, so that the hits held never
// span more than the 16-bit time circle (latency + fake interval + margin).
// Every read-out word is compared with a model computed from the hit and
// trigger times; no hit and no trigger may be lost.
module tb_workload_latency;
  import f1_pkg::*;
  localparam int OFFSET = 58000, WINDOW = 2000, FAKE = 20, STROBE = 3;
  localparam int NTRIG = 40, PERIOD = 1754;   // 100 kHz triggers

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
    repeat (400000) @(posedge clk);
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
  int          hclk [NCH][$];      // clock in which each hit was given
  int          ncyc = 0;           // clock counter
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
    // deleted, as in the chip; the model forgets them too. Between triggers
    // the 16-bit time goes round more than once, so the model also forgets
    // hits older than the limit in true time: the fake triggers have
    // deleted those in the chip.
    for (int c = 0; c < NCH; c++)
      while (hits[c].size() > 0) begin
        h = (mmode == MODE_LATCH) ? {hits[c][0][15:4], 4'b0} : hits[c][0];
        d = h - s;
        if (d < lim && (ncyc - hclk[c][0]) * ((mmode == MODE_HIRES) ? 76 : 38) < int'(lim)) break;
        void'(hits[c].pop_front());
        void'(nmatch[c].pop_front());
        void'(hclk[c].pop_front());
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

  always @(posedge clk) ncyc <= ncyc + 1;

  task automatic clear_model();
    for (int c = 0; c < NCH; c++) begin hits[c].delete(); nmatch[c].delete(); hclk[c].delete(); end
  endtask

  // drive one clock of hits: mask of channels, each with a random fine bin
  task automatic hit_cycle(input logic [NCH-1:0] m);
    int k;
    for (int c = 0; c < NCH; c++) if (m[c]) begin
      k = $urandom_range(0, 37);
      hit_taps[c] = taps_for(k);
      hits[c].push_back(rel(k));
      nmatch[c].push_back(0);
      hclk[c].push_back(ncyc);
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
  int n_hits = 0;

  task automatic run_std();
    for (int t = 0; t < NTRIG; t++) begin
      repeat (PERIOD - 1) traffic(234, 0);
      traffic(234, 1);
    end
  endtask

  task automatic run_hires();
    for (int t = 0; t < NTRIG; t++) begin
      repeat (PERIOD) begin
        for (int p = 0; p < NCH / 2; p++) begin
          if ($urandom_range(1, 117) == 1) begin
            int h, ke, ko;
            logic [15:0] re, ro;
            h  = $urandom_range(0, 74);
            ke = h / 2; ko = (h + 1) / 2;
            re = rel(ke); ro = rel(ko);
            hit_taps[2 * p] = taps_for(ke);
            hit_taps[2 * p + 1] = taps_for(ko);
            hit_stb[2 * p +: 2] = 2'b11;
            hits[2 * p + toggle[p]].push_back(re + ro);
            nmatch[2 * p + toggle[p]].push_back(0);
            hclk[2 * p + toggle[p]].push_back(ncyc);
            toggle[p] = !toggle[p];
          end
        end
        if (trig_stb == 0 && $urandom_range(1, PERIOD) == 1) trigger_cycle();
        @(negedge clk);
        hit_stb = '0; trig_stb = 0;
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    tok_pending = 1;
    setup(REG_OFFSET, 16'(OFFSET));
    setup(REG_WINDOW, 16'(WINDOW));
    setup(REG_FAKE, 16'(FAKE));
    synch_reset = 1; @(negedge clk); synch_reset = 0;
    clear_model();
    run_std();
    repeat (200) traffic(234, 0);
    drain(5000);
    check(hits_lost == '0 && trig_lost == 0, "standard: nothing lost");
    check(n_trailers == NTRIG, $sformatf("standard: %0d events of %0d", n_trailers, NTRIG));
    $display("standard mode: %0d events, %0d words", n_trailers, n_words);

    // high resolution: latency 4.35 us = 29000 bins, window in half bins
    offset = OFFSET / 2;
    setup(REG_OFFSET, 16'(OFFSET / 2));
    new_mode(16'h0029, 2 * WINDOW);
    run_hires();
    repeat (200) @(negedge clk);
    drain(5000);
    check(hits_lost == '0 && trig_lost == 0, "high resolution: nothing lost");
    check(n_hires > 0, "high resolution hits read out");
    $display("total: %0d events, %0d words, %0d high resolution hits", n_trailers, n_words, n_hires);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
