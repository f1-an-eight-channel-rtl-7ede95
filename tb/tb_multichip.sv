// tb_multichip: three TDCs on one front-end board, as a readout system
// connects them. They share the clock, the trigger, Synch-Reset, Common
// start, the serial setup line and one data bus, and pass one token around
// a ring (chip 0 -> 1 -> 2 -> 0).
// Checked:
//  * setup frames with the common bit reach all chips, addressed frames only
//    their chip (chip 2 gets a narrower window than the others);
//  * the chips leave reset at different times, so their coarse counters
//    differ until a common Synch-Reset aligns them;
//  * every bus word, by its chip ID, against a per-chip model of the
//    trigger matching (window start = trigger time minus latency);
//  * never more than one chip on the bus, one event per token visit;
//  * hand-overs without a wait state: one chip's first word directly after
//    another chip's last word (counted; none at all is a failure).
module tb_multichip;
  import f1_pkg::*;
  localparam int NCHIP = 3;
  localparam int OFFSET = 2000, WINDOW = 1000, WINDOW2 = 500, NTRIG = 60;

  logic clk = 0;
  logic [NCHIP-1:0] rst_n = '0;
  logic [NCHIP-1:0][NCH-1:0] hit_stb = '0;
  logic [NCHIP-1:0][NCH-1:0][NTAPS-1:0] hit_taps = '0;
  logic trig_stb = 0, synch_reset = 0, common_stb = 0;
  logic [NTAPS-1:0] trig_taps = '0, common_taps = '0;
  logic setup_in = 1;
  logic inject = 0;
  logic [NCHIP-1:0] token_in, token_out, bus_we, data_ready, dac_sdi, dac_clk, dac_ld, setup_err;
  logic [NCHIP-1:0][IF_W-1:0] data_out;
  logic [NCHIP-1:0][EVT_W-1:0] trig_count;
  logic [NCHIP-1:0][7:0] trig_lost;
  logic [NCHIP-1:0][NCH-1:0][7:0] hits_lost;
  logic [NCHIP-1:0][16:0] base;

  for (genvar i = 0; i < NCHIP; i++) begin : g_chip
    logic [5:0] input_delay;
    logic [3:0] bus_skew;
    assign token_in[i] = (i == 0) ? (token_out[NCHIP-1] | inject) : token_out[i-1];
    f1_tdc u_tdc (
      .clk, .rst_n(rst_n[i]),
      .hit_stb(hit_stb[i]), .hit_edge('1), .hit_taps(hit_taps[i]), .latch_in('0),
      .trig_stb, .trig_taps, .synch_reset, .common_stb, .common_taps,
      .setup_sample_en(1'b1), .setup_in, .chip_addr(3'(i + 1)),
      .token_in(token_in[i]), .token_out(token_out[i]), .data_out(data_out[i]),
      .bus_we(bus_we[i]), .data_ready(data_ready[i]),
      .dac_sdi(dac_sdi[i]), .dac_clk(dac_clk[i]), .dac_ld(dac_ld[i]),
      .input_delay, .bus_skew, .trig_count(trig_count[i]), .trig_lost(trig_lost[i]),
      .hits_lost(hits_lost[i]), .setup_err(setup_err[i])
    );
    assign base[i] = u_tdc.base;
  end

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
    repeat (100000) @(posedge clk);
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

  // one setup frame: 2 start bits, address, common bit, register, data, 2 stop bits
  task automatic setup(input logic [2:0] a, input bit common, input logic [3:0] r, input logic [15:0] d);
    logic [27:0] f;
    f = {2'b00, a, common, r, d, 2'b11};
    for (int i = 27; i >= 0; i--) begin
      setup_in = f[i];
      repeat (4) @(negedge clk);
    end
    setup_in = 1;
    repeat (4) @(negedge clk);
  endtask

  // ------------------------------------------------------------ time model
  logic [16:0] refv = '0;
  int          window [NCHIP];
  logic [15:0] hits [NCHIP][NCH][$];
  logic [IF_W-1:0] expq [NCHIP][$];

  function automatic logic [15:0] rel(int k);
    return 16'(base[0] + 17'(k) - refv);
  endfunction

  task automatic model_event(input logic [16:0] tcur, input logic [5:0] evt);
    logic [10:0] s11;
    logic [15:0] s, d, lim;
    s11 = tcur[15:5] - refv[15:5] - 11'(OFFSET >> 5);
    s = {s11, 5'b0};
    lim = 16'((OFFSET >> 5) * 32 + 4096);
    for (int ch = 0; ch < NCHIP; ch++) begin
      for (int c = 0; c < NCH; c++) begin
        while (hits[ch][c].size() > 0) begin
          d = hits[ch][c][0] - s;
          if (d < lim) break;
          void'(hits[ch][c].pop_front());
        end
        foreach (hits[ch][c][i]) begin
          d = hits[ch][c][i] - s;
          if (d < lim && d < 16'(window[ch]))
            expq[ch].push_back({3'(ch + 1), 1'b0, 3'(c), 1'b0, hits[ch][c][i]});
        end
      end
      expq[ch].push_back({3'(ch + 1), 1'b1, 14'b0, evt});
    end
  endtask

  // one clock of traffic: independent random hits per chip and channel
  task automatic traffic(input int p, input bit trig);
    int k;
    for (int ch = 0; ch < NCHIP; ch++)
      for (int c = 0; c < NCH; c++)
        if ($urandom_range(1, p) == 1) begin
          k = $urandom_range(0, 37);
          hit_taps[ch][c] = taps_for(k);
          hit_stb[ch][c] = 1;
          hits[ch][c].push_back(rel(k));
        end
    if (trig) begin
      k = $urandom_range(0, 37);
      trig_taps = taps_for(k);
      trig_stb = 1;
      check(trig_count[0] == trig_count[1] && trig_count[1] == trig_count[2], "trigger counters agree");
      model_event(base[0] + 17'(k), trig_count[0]);
    end
    @(negedge clk);
    hit_stb = '0; trig_stb = 0;
  endtask

  // ------------------------------------------------------------ data bus
  int cyc = 0, last_cyc = -10, last_chip = -1;
  int n_words = 0, n_trailers [NCHIP], n_gapless = 0, n_handover = 0;
  logic [IF_W-1:0] w;
  int ch;
  always @(posedge clk) begin
    cyc++;
    check($countones(bus_we) <= 1, "one chip on the bus");
    for (int i = 0; i < NCHIP; i++) if (bus_we[i]) begin
      w = data_out[i];
      ch = int'(w[23:21]) - 1;
      n_words++;
      check(ch == i, $sformatf("chip %0d sent ID %0d", i, w[23:21]));
      if (ch >= 0 && ch < NCHIP) begin
        check(expq[ch].size() > 0 && w == expq[ch][0],
              $sformatf("chip %0d word %h, expected %h", i, w, (expq[ch].size() > 0) ? expq[ch][0] : 24'h0));
        if (expq[ch].size() > 0) void'(expq[ch].pop_front());
      end
      if (last_chip != i && last_chip >= 0) begin
        n_handover++;
        if (cyc == last_cyc + 1) n_gapless++;
      end
      last_chip = i; last_cyc = cyc;
      if (w[20]) n_trailers[i]++;
    end
  end

  // one event per token visit: the token leaves with the trailer
  always @(posedge clk) for (int i = 0; i < NCHIP; i++)
    if (rst_n[i] && bus_we[i] && data_out[i][20]) check(token_out[i], "token leaves with the trailer");

  initial begin
    int n;
    window = '{WINDOW, WINDOW2, WINDOW};
    // staggered reset: the coarse counters start apart
    for (int i = 0; i < NCHIP; i++) begin
      repeat (3 + 5 * i) @(negedge clk);
      rst_n[i] = 1;
    end
    repeat (2) @(negedge clk);
    check(base[0] != base[1] && base[1] != base[2], "coarse counters apart before Synch-Reset");
    // common setup, then one addressed frame
    setup(3'd0, 1'b1, REG_OFFSET, 16'(OFFSET));
    setup(3'd0, 1'b1, REG_WINDOW, 16'(WINDOW));
    setup(3'd0, 1'b1, REG_FAKE, 16'd40);
    setup(3'd2, 1'b0, REG_WINDOW, 16'(WINDOW2));
    check(g_chip[0].u_tdc.regs[REG_OFFSET] == 16'(OFFSET) && g_chip[1].u_tdc.regs[REG_OFFSET] == 16'(OFFSET)
          && g_chip[2].u_tdc.regs[REG_OFFSET] == 16'(OFFSET), "common frame reached every chip");
    check(g_chip[1].u_tdc.regs[REG_WINDOW] == 16'(WINDOW2), "addressed frame reached chip 2");
    check(g_chip[0].u_tdc.regs[REG_WINDOW] == 16'(WINDOW) && g_chip[2].u_tdc.regs[REG_WINDOW] == 16'(WINDOW),
          "addressed frame ignored by chips 1 and 3");
    check(setup_err == '0, "no setup errors");
    synch_reset = 1;
    @(negedge clk);
    synch_reset = 0;
    @(negedge clk);
    check(base[0] == base[1] && base[1] == base[2], "coarse counters aligned by Synch-Reset");
    // Common start with a fine bin
    common_taps = taps_for(13);
    common_stb = 1;
    refv = base[0] + 17'd13;
    @(negedge clk);
    common_stb = 0;
    @(negedge clk);
    inject = 1;
    @(negedge clk);
    inject = 0;
    // random hits and triggers; triggers are close enough that events queue
    for (int t = 0; t < NTRIG; t++) begin
      repeat ($urandom_range(5, 120)) traffic(40, 0);
      traffic(40, 1);
    end
    repeat (200) traffic(40, 0);
    n = 0;
    while ((expq[0].size() + expq[1].size() + expq[2].size()) > 0 && n < 5000) begin
      @(negedge clk); n++;
    end
    for (int i = 0; i < NCHIP; i++) begin
      check(expq[i].size() == 0, $sformatf("chip %0d: %0d words never read out", i + 1, expq[i].size()));
      check(n_trailers[i] == NTRIG, $sformatf("chip %0d: %0d events", i + 1, n_trailers[i]));
      check(trig_lost[i] == 0 && hits_lost[i] == '0, $sformatf("chip %0d lost nothing", i + 1));
    end
    check(n_gapless > 0, "a hand-over without a wait state");
    $display("words %0d, hand-overs %0d, without a wait state %0d", n_words, n_handover, n_gapless);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
