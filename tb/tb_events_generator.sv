// tb_events_generator: random spike vectors and group-to-type maps, one per
// clock; each result must appear exactly 3 clocks later and equal the
// saturated per-type spike count of enabled groups.
module tb_events_generator;
  import cortex_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [N_NEURON-1:0] spikes;
  logic [N_GROUP-1:0][2:0] type_of_group;
  logic [N_GROUP-1:0] group_en;
  logic [N_TYPE-1:0][3:0] counts;
  int checks = 0, failures = 0;
  logic [N_TYPE-1:0][3:0] expq [$];
  events_generator dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  int sent = 0, got = 0, cyc = 0, first_in = -1, first_out = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      logic [N_TYPE-1:0][3:0] e;
      if (first_out < 0) first_out = cyc;
      e = expq.pop_front();
      checks++; got++;
      if (counts !== e) begin failures++; $display("FAIL counts %h exp %h", counts, e); end
    end
  end
  initial begin
    spikes = '0; type_of_group = '0; group_en = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      logic [N_TYPE-1:0][3:0] e;
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      for (int i = 0; i < N_NEURON; i++) spikes[i] = (n % 50 == 7) ? 1'b1 : ($urandom % 8 == 0);
      for (int g = 0; g < N_GROUP; g++) begin
        type_of_group[g] = (n % 50 == 7) ? 3'd2 : 3'($urandom);
        group_en[g] = ($urandom % 5) != 0 || (n % 50 == 7);
      end
      if (in_valid) begin
        for (int t = 0; t < N_TYPE; t++) begin
          int c; c = 0;
          for (int g = 0; g < N_GROUP; g++)
            if (group_en[g] && type_of_group[g] == 3'(t)) c += $countones(spikes[4*g +: 4]);
          e[t] = (c > 15) ? 4'd15 : 4'(c);
        end
        expq.push_back(e); sent++;
        if (first_in < 0) first_in = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    repeat (6) @(posedge clk);
    checks++; if (got != sent) begin failures++; $display("FAIL: %0d of %0d results", got, sent); end
    checks++; if (first_out - first_in - 1 != 3) begin failures++; $display("FAIL: latency %0d", first_out - first_in - 1); end   // inputs are sampled one edge after they are applied
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
