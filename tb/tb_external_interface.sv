// tb_external_interface: decodes every instruction kind. Register writes
// must appear on the configuration outputs one clock later (and the reset
// values must be the defaults: 2 segments, 200-clock slot, delay thresholds
// from default_thr); LUT writes pass straight through; an event instruction
// waits while the axon array is not ready. Spikes inside the monitored range
// are queued in order and those outside are not; a full spike FIFO counts
// the losses.
module tb_external_interface;
  import cortex_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, lut_wr, run, ext_ev_valid, ext_ev_ready = 0;
  host_cmd_t cmd;
  lut_table_e lut_sel;
  logic [15:0] lut_addr, slot_cycles, dropped;
  logic [511:0] lut_data;
  logic [10:0] nseg;
  logic [9:0] f;
  logic [13:0] n_entry;
  logic [16:0][19:0] thr;
  post_ev_t ext_ev, rem_ev, rem_out;
  logic spk_valid = 0, rem_valid = 0, spk_out_valid, spk_out_ready = 0, rem_out_valid, rem_out_ready = 1;
  logic [DA_W-1:0] spk_addr;
  logic [N_NEURON-1:0] spk;
  logic [DA_W+N_NEURON-1:0] spk_out;
  int checks = 0, failures = 0;
  external_interface dut (.*);
  always #5 clk = ~clk;
  task automatic check(input bit ok, input string msg);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    int waited;
    cmd = '0; rem_ev = '0; spk = '0; spk_addr = '0;
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    check(nseg == 11'd2 && slot_cycles == 16'd200 && !run, "reset values");
    for (int i = 0; i <= 16; i++) check(thr[i] == default_thr(i), $sformatf("threshold %0d", i));
    // register writes
    cmd = '{op: OP_REG, sel: 4'd0, addr: R_NSEG, data: 512'd172}; cmd_valid = 1;
    @(negedge clk); check(nseg == 11'd172, "R_NSEG");
    cmd.addr = R_SLOT; cmd.data = 512'd333; @(negedge clk); check(slot_cycles == 16'd333, "R_SLOT");
    cmd.addr = R_F; cmd.data = 512'd77; @(negedge clk); check(f == 10'd77, "R_F");
    cmd.addr = R_THR0 + 16'd5; cmd.data = 512'd12345; @(negedge clk); check(thr[5] == 20'd12345, "R_THR0+5");
    cmd.addr = R_NENTRY; cmd.data = 512'd16; @(negedge clk); check(n_entry == 14'd16, "R_NENTRY");
    cmd.addr = R_MON_LO; cmd.data = 512'd1000; @(negedge clk);
    cmd.addr = R_MON_HI; cmd.data = 512'd1080; @(negedge clk);
    cmd.addr = R_RUN; cmd.data = 512'd1; @(negedge clk); check(run, "R_RUN");
    // LUT write passes through combinationally
    cmd = '{op: OP_LUT, sel: 4'(T_PRE), addr: 16'd99, data: {8{64'hDEADBEEF_01234567}}}; #1;
    check(lut_wr && lut_sel == T_PRE && lut_addr == 16'd99 && lut_data == {8{64'hDEADBEEF_01234567}} && cmd_ready, "LUT write");
    @(negedge clk);
    // event instruction waits for the axon array
    cmd = '{op: OP_EVENT, sel: 4'd0, addr: 16'd0, data: 512'h1234_5678_9abc}; #1;
    check(ext_ev_valid && !cmd_ready && ext_ev == post_ev_t'(129'h1234_5678_9abc), "event held");
    waited = 0;
    repeat (3) begin @(negedge clk); waited++; check(ext_ev_valid && !cmd_ready, "event still held"); end
    ext_ev_ready = 1; #1; check(cmd_ready, "event accepted");
    @(negedge clk); cmd_valid = 0; ext_ev_ready = 0; #1; check(!ext_ev_valid, "event gone");
    // spike monitor: 100 spikes with addresses 900..1099, FIFO of 64 not read
    for (int a = 900; a < 1100; a++) begin
      spk_valid = 1; spk_addr = DA_W'(a); spk = N_NEURON'(a * 7);
      @(negedge clk);
    end
    spk_valid = 0; @(negedge clk);
    check(dropped == 16'd17, $sformatf("dropped %0d", dropped));
    spk_out_ready = 1;
    for (int a = 1000; a < 1064; a++) begin
      #1; check(spk_out_valid && spk_out == {DA_W'(a), N_NEURON'(a * 7)}, $sformatf("spike %0d", a));
      @(negedge clk);
    end
    #1; check(!spk_out_valid, "spike FIFO empty");
    // remote events pass through their FIFO
    rem_ev = post_ev_t'(129'h55); rem_valid = 1; @(negedge clk); rem_valid = 0; #1;
    check(rem_out_valid && rem_out == post_ev_t'(129'h55), "remote event");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
