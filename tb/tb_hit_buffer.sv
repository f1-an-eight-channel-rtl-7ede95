// tb_hit_buffer: fills the buffer, checks that the 17th hit is refused and
// counted, that every word reads back at its address, and that moving the
// start-search pointer (deleting old hits) makes room again, including
// across the wrap of the pointers.
module tb_hit_buffer;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0, ssp_load = 0, full;
  logic [TIME_W-1:0] wr_data = '0, rd_data;
  logic [4:0] rd_ptr = '0, ssp_next = '0, wp, ssp;
  logic [7:0] lost;
  int checks = 0, failures = 0;

  hit_buffer dut (.*);
  always #5 clk = ~clk;

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

  task automatic write(input logic [15:0] d);
    wr_en = 1; wr_data = d;
    @(negedge clk);
    wr_en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(wp == 0 && ssp == 0 && !full, "empty after reset");
    for (int i = 0; i < 16; i++) write(16'(1000 + 7 * i));
    check(full && wp == 5'd16, "full after 16 hits");
    write(16'hdead);
    check(lost == 1 && wp == 5'd16, "17th hit refused");
    for (int i = 0; i < 16; i++) begin
      rd_ptr = 5'(i); #1;
      check(rd_data == 16'(1000 + 7 * i), $sformatf("word %0d = %0d", i, rd_data));
    end
    // delete 5 old hits
    @(negedge clk);
    ssp_load = 1; ssp_next = 5'd5;
    @(negedge clk);
    ssp_load = 0;
    check(!full && ssp == 5, $sformatf("room after deletion ssp=%0d wp=%0d full=%b", ssp, wp, full));
    for (int i = 0; i < 5; i++) write(16'(2000 + i));
    check(full && wp == 5'd21, "full again, pointer wrapped");
    for (int i = 0; i < 5; i++) begin
      rd_ptr = 5'(16 + i); #1;
      check(rd_data == 16'(2000 + i), $sformatf("wrapped word %0d = %0d", i, rd_data));
    end
    rd_ptr = 5'd5; #1;
    check(rd_data == 16'(1000 + 35), "old word kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
