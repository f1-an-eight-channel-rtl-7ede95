// tb_interface_fifo: eight channel queues (standing in for the readout
// buffers) are filled with random events; the collected 24-bit words must
// come out channel by channel with TDC ID and channel number, followed by
// one trailer per event, and data_ready must follow the trailers held (or a
// full FIFO). The reader pauses at times so that the FIFO fills up.
module tb_interface_fifo;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, rd = 0, empty, data_ready;
  logic [2:0] tdc_id = 3'd5;
  logic ro_empty [NCH];
  ro_word_t ro_rdata [NCH];
  logic ro_rd [NCH];
  logic [IF_W-1:0] rdata;
  ro_word_t chq [NCH][$];
  logic [IF_W-1:0] expq [$];
  int checks = 0, failures = 0, trailers_seen = 0, ready_full = 0;

  interface_fifo dut (.*);
  always #5 clk = ~clk;

  always_comb for (int c = 0; c < NCH; c++) begin
    ro_empty[c] = (chq[c].size() == 0);
    ro_rdata[c] = (chq[c].size() > 0) ? chq[c][0] : '0;
  end
  always @(posedge clk) if (rst_n) for (int c = 0; c < NCH; c++)
    if (ro_rd[c] && chq[c].size() > 0) void'(chq[c].pop_front());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reader with pauses, checking every word against the expected stream
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (data_ready && !empty && expq.size() > 0) begin
        // ready means a trailer is inside or the FIFO is full
        int n; n = 0;
        foreach (expq[i]) if (i < 16 && expq[i][20]) n++;
        check(n > 0 || dut.full, "data_ready without a complete event");
        if (n == 0) ready_full++;
      end
      rd = ($urandom_range(0, 9) < 6) && !empty;
      if (rd) begin
        check(expq.size() > 0 && rdata == expq[0], $sformatf("word %h", rdata));
        if (expq.size() > 0) void'(expq.pop_front());
        if (rdata[20]) trailers_seen++;
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 60; ev++) begin
      for (int c = 0; c < NCH; c++) begin
        int nh;
        nh = (ev % 10 == 3) ? 4 : $urandom_range(0, 2);
        for (int h = 0; h < nh; h++) begin
          logic [15:0] t; t = 16'($urandom);
          chq[c].push_back('{marker: 1'b0, data: t});
          expq.push_back({tdc_id, 1'b0, 3'(c), 1'b0, t});
        end
        chq[c].push_back('{marker: 1'b1, data: 16'(ev % 64)});
      end
      expq.push_back({tdc_id, 1'b1, 14'b0, 6'(ev % 64)});
      repeat ($urandom_range(5, 40)) @(negedge clk);
    end
    repeat (400) @(negedge clk);
    check(expq.size() == 0, $sformatf("%0d words never came out", expq.size()));
    check(trailers_seen == 60, $sformatf("%0d trailers", trailers_seen));
    check(ready_full > 0, "FIFO never filled up before a trailer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
