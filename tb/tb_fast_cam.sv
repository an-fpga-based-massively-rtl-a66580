// tb_fast_cam: full-size CAM (128 banks x 64 rows). Writes 300 distinct keys
// at random entries, then searches for stored keys (must hit at the right
// entry), absent keys (must miss) and cleared keys (must miss), and reads
// keys back. Every search must end within BANK_DEPTH + 2 clocks of its
// start (paper: at most 64 clock cycles per search, plus the compare).
module tb_fast_cam;
  timeunit 1ns; timeprecision 1ps;
  localparam int N = 128 * 64;
  logic clk = 0, rst_n = 0, search = 0, wr = 0, clr = 0, rd = 0;
  logic [19:0] key, wr_key, rd_key;
  logic [12:0] wr_idx, clr_idx, rd_idx, hit_idx;
  logic search_busy, done, hit;
  logic [N-1:0] valid;
  int checks = 0, failures = 0, maxlat = 0;
  fast_cam dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog #5ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  logic [19:0] keys [300];
  logic [12:0] idxs [300];
  task automatic do_search(input logic [19:0] k, input bit exp_hit, input logic [12:0] exp_idx);
    int lat;
    @(negedge clk); search = 1; key = k;
    @(negedge clk); search = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    if (lat > maxlat) maxlat = lat;
    checks++;
    if (hit != exp_hit || (exp_hit && hit_idx != exp_idx)) begin
      failures++;
      if (failures < 5) $display("FAIL key %h: hit %0b idx %0d, exp %0b %0d", k, hit, hit_idx, exp_hit, exp_idx);
    end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      keys[i] = 20'(i * 3517 + 11);
      idxs[i] = 13'(i * 27 + $urandom_range(0, 26));
      @(negedge clk); wr = 1; wr_idx = idxs[i]; wr_key = keys[i];
    end
    @(negedge clk); wr = 0;
    for (int n = 0; n < 150; n++) begin
      int i; i = $urandom_range(0, 299);
      do_search(keys[i], 1, idxs[i]);
    end
    for (int n = 0; n < 20; n++) do_search(20'hF0000 + 20'(n), 0, '0);
    for (int i = 0; i < 300; i += 2) begin
      @(negedge clk); rd = 1; rd_idx = idxs[i];
      @(negedge clk); rd = 0;
      checks++;
      if (rd_key != keys[i]) begin failures++; $display("FAIL read entry %0d: %h", idxs[i], rd_key); end
    end
    for (int i = 0; i < 40; i++) begin @(negedge clk); clr = 1; clr_idx = idxs[i]; end
    @(negedge clk); clr = 0;
    for (int i = 0; i < 40; i += 4) do_search(keys[i], 0, '0);
    for (int i = 40; i < 60; i++) do_search(keys[i], 1, idxs[i]);
    checks++;
    if (maxlat > 64 + 2) begin failures++; $display("FAIL: search took %0d clocks", maxlat); end
    $display("longest search %0d clocks", maxlat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
