// tb_setup_interface: sends setup frames bit-serially, four samples per bit
// (one sample every other clock), and checks the register writes: a frame
// to this chip, a frame to another chip (ignored), the same with the common
// bit (written), and frames with a bad start or stop bit (refused).
module tb_setup_interface;
  import f1_pkg::*;
  logic clk = 0, rst_n = 0, sample_en = 0, sdi = 1;
  logic [2:0] chip_addr = 3'd3;
  logic [15:0] regs [16];
  logic wr_stb, frame_err;
  logic [3:0] wr_addr;
  logic [15:0] wr_data;
  int checks = 0, failures = 0, nwr = 0, nerr = 0;

  setup_interface dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) sample_en <= !sample_en;
  always @(posedge clk) if (rst_n) begin
    if (wr_stb) nwr++;
    if (frame_err) nerr++;
  end

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

  // 28-bit frame: start start, address, common, register, data, stop stop
  task automatic send(input logic [2:0] a, input logic com, input logic [3:0] r,
                      input logic [15:0] d, input logic [1:0] st = 2'b00,
                      input logic [1:0] sp = 2'b11);
    logic [27:0] f;
    f = {st, a, com, r, d, sp};
    for (int i = 27; i >= 0; i--) begin
      sdi = f[i];
      repeat (8) @(negedge clk);     // 4 samples at every other clock
    end
    sdi = 1;
    repeat (16) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(regs[REG_CTRL] == 16'h0028 && regs[REG_WINDOW] == 16'd256, "reset values");
    send(3'd3, 1'b0, REG_OFFSET, 16'hBEEF);
    check(regs[REG_OFFSET] == 16'hBEEF && nwr == 1, "own address written");
    check(wr_addr == REG_OFFSET && wr_data == 16'hBEEF, "write announced");
    send(3'd4, 1'b0, REG_WINDOW, 16'h1234);
    check(regs[REG_WINDOW] == 16'd256 && nwr == 1, "other chip ignored");
    send(3'd4, 1'b1, REG_WINDOW, 16'h1234);
    check(regs[REG_WINDOW] == 16'h1234 && nwr == 2, "common bit written");
    send(3'd3, 1'b0, REG_FAKE, 16'h5555, 2'b00, 2'b10);
    check(regs[REG_FAKE] == 16'd32 && nerr == 1, "bad stop bit refused");
    send(3'd3, 1'b0, REG_FAKE, 16'h5555, 2'b01, 2'b11);
    check(regs[REG_FAKE] == 16'd32 && nerr >= 2, "bad start bit refused");
    send(3'd3, 1'b0, REG_FAKE, 16'h0001);
    check(regs[REG_FAKE] == 16'h0001, "frame after errors received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
