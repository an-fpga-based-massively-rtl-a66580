// tb_delay_generator: with the default thresholds (P_i proportional to 1/i)
// and f = 0 the generator must give a delay index every clock and the
// relative frequency of index i must follow 1/(i+1); with f = 768 only about
// a quarter of the clocks give an index.
module tb_delay_generator;
  import cortex_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, sel_valid;
  logic [16:0][19:0] thr;
  logic [9:0] f;
  logic [3:0] sel;
  int checks = 0, failures = 0;
  int hist [16];
  delay_generator dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog #10ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    int nv; real p0, e;
    for (int i = 0; i <= 16; i++) thr[i] = default_thr(i);
    f = '0;
    repeat (3) @(posedge clk); rst_n = 1; repeat (2) @(posedge clk);
    nv = 0;
    for (int n = 0; n < 200000; n++) begin
      @(posedge clk); #1;
      if (sel_valid) begin nv++; hist[sel]++; end
    end
    checks++; if (nv < 199990) begin failures++; $display("FAIL: valid %0d with f=0", nv); end
    p0 = real'(hist[0]) / nv;
    for (int i = 0; i < 16; i++) begin
      real h;
      h = real'(hist[i]) / nv;
      e = p0 / (i + 1);
      checks++;
      if (h < e * 0.85 || h > e * 1.15) begin failures++; $display("FAIL: P%0d = %f expected %f", i + 1, h, e); end
    end
    f = 10'd768; nv = 0;
    for (int n = 0; n < 100000; n++) begin @(posedge clk); #1; if (sel_valid) nv++; end
    checks++; if (nv < 20000 || nv > 30000) begin failures++; $display("FAIL: valid %0d with f=768", nv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
