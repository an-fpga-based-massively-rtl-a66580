// tb_parallel_cam: writes 512 random ascending range starts, then sends a
// random address to each of the two query ports every clock and checks that
// the range index (number of starts <= address, minus one) appears exactly
// 3 clocks later, as the paper's 3-cycle search requires.
module tb_parallel_cam;
  timeunit 1ns; timeprecision 1ps;
  localparam int N = 512, W = 27, NQ = 2;
  logic clk = 0, rst_n = 0, wr = 0;
  logic [8:0] wr_idx;
  logic [W-1:0] wr_val;
  logic [NQ-1:0][W-1:0] q_addr;
  logic [NQ-1:0][8:0] q_idx;
  logic [W-1:0] thr [N];
  int checks = 0, failures = 0;
  parallel_cam #(.N(N), .W(W), .NQ(NQ)) dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog #2ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  function automatic int ref_idx(input logic [W-1:0] a);
    int c; c = 0;
    for (int i = 0; i < N; i++) if (a >= thr[i]) c++;
    return (c == 0) ? 0 : c - 1;
  endfunction
  logic [W-1:0] hist [NQ][4];
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    thr[0] = 27'd100;
    for (int i = 1; i < N; i++) thr[i] = thr[i-1] + 27'($urandom_range(1, 200000));
    for (int i = 0; i < N; i++) begin
      @(negedge clk); wr = 1; wr_idx = 9'(i); wr_val = thr[i];
    end
    @(negedge clk); wr = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int q = 0; q < NQ; q++) begin
        q_addr[q] = (n % 7 == 0) ? thr[$urandom_range(0, N-1)] : 27'($urandom_range(0, 110000000));
        for (int k = 3; k > 0; k--) hist[q][k] = hist[q][k-1];
        hist[q][0] = q_addr[q];
      end
      if (n >= 3)
        for (int q = 0; q < NQ; q++) begin
          checks++;
          // q_idx now shows the answer for the address applied 3 clocks ago
          if (int'(q_idx[q]) != ref_idx(hist[q][3])) begin
            failures++;
            if (failures < 5) $display("FAIL port %0d addr %0d got %0d exp %0d", q, hist[q][3], q_idx[q], ref_idx(hist[q][3]));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
