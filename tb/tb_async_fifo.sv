// tb_async_fifo: a writer on a 5 ns clock and a reader on a 7.3 ns clock
// with random push and pop. Every word must come out once, in order; the
// FIFO must report full at some point and never overflow; the write-side
// fill level must never exceed the depth.
module tb_async_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int W = 16, DEPTH = 16;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0, push = 0, pop = 0, full, empty;
  logic [W-1:0] wr_data, rd_data;
  logic [4:0] wcount;
  int checks = 0, failures = 0, nw = 0, nr = 0, nfull = 0;
  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.*);
  always #2.5 wclk = ~wclk;
  always #3.65 rclk = ~rclk;
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  always @(posedge wclk) if (wrst_n) begin
    if (push && !full) nw++;
    if (full) nfull++;
    if (wcount > 5'(DEPTH)) begin checks++; failures++; $display("FAIL: wcount %0d", wcount); end
  end
  always @(negedge wclk) begin
    push <= (nw < 2000) && ($urandom % 3 != 0);
    wr_data <= 16'(nw);
  end
  always @(posedge rclk) if (rrst_n) begin
    if (pop && !empty) begin
      checks++;
      if (rd_data != 16'(nr)) begin failures++; if (failures < 5) $display("FAIL: got %0d exp %0d", rd_data, nr); end
      nr++;
    end
  end
  always @(negedge rclk) pop <= (nr < 1000) ? ($urandom % 4 == 0) : ($urandom % 4 != 0);
  initial begin
    repeat (3) @(posedge rclk); wrst_n = 1; rrst_n = 1;
    wait (nr == 2000);
    repeat (5) @(posedge rclk);
    checks++; if (nfull == 0) begin failures++; $display("FAIL: never full"); end
    checks++; if (!empty) begin failures++; $display("FAIL: not empty at end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
