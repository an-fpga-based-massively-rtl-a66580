// tb_physical_neuron: random neurons, parameters and random bits enter on
// random clocks. Each result must leave exactly 11 clocks after it entered
// (paper: 11-stage pipeline without halt) and match an integer model of the
// PSC equation followed by the membrane equation; disabled neurons must
// leave at rest {v_init, 0} without a spike.
module tb_physical_neuron;
  import cortex_pkg::*;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, in_valid = 0, enable, out_valid, spike;
  nstate_t state_in, state_out;
  logic [3:0] w;
  type_prm_t prm;
  logic [9:0] r;
  int checks = 0, failures = 0, cyc = 0, n_spk = 0;
  typedef struct { int t; nstate_t st; bit spk; } exp_t;
  exp_t q [$];
  physical_neuron dut (.*);
  always #5 clk = ~clk;
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  function automatic int sx4(input logic [3:0] x); return x[3] ? int'(x) - 16 : int'(x); endfunction
  function automatic exp_t model();
    exp_t e; int p, s, act, vn;
    e.spk = 0;
    if (!enable) begin e.st = '{v: prm.v_init, psc: 4'd0}; return e; end
    p = sx4(state_in.psc);
    s = ((p * int'(p < 0 ? prm.l_ipsc : prm.l_epsc)) >>> 3) + int'(r[4:0]) + sx4(w) * int'(prm.g_syn) * 2;
    s = s >>> 5; if (s > 7) s = 7; if (s < -8) s = -8;
    e.st.psc = 4'(s);
    act = (state_in.v >= prm.v_init);
    vn = (((int'(state_in.v) - int'(prm.v_init)) * int'(act ? prm.l_mem : prm.l_rfc)) >>> 3) + int'(r[9:5])
       + (act ? s * int'(prm.g_psc) * 2 : 0);
    vn = int'(prm.v_init) + (vn >>> 5);
    if (vn > 15) begin if (act && s > 0) begin e.spk = 1; e.st.v = 0; end else e.st.v = 15; end
    else if (vn < 0) e.st.v = 0;
    else e.st.v = 4'(vn);
    return e;
  endfunction
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid) begin
      exp_t e;
      e = q.pop_front();
      checks++;
      // inputs applied before edge t are sampled at edge t+1; 11 stages later the tb sees the result
      if (cyc - e.t != 12 || state_out != e.st || spike != e.spk) begin
        failures++;
        if (failures < 5) $display("FAIL: after %0d clocks got %h/%0b exp %h/%0b", cyc - e.t - 1, state_out, spike, e.st, e.spk);
      end
      if (spike) n_spk++;
    end
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      enable = ($urandom % 5) != 0;
      state_in = nstate_t'($urandom); w = 4'($urandom); r = 10'($urandom);
      prm = type_prm_t'({$urandom, $urandom});
      if (n % 4 == 0) begin prm.g_syn = 8'd255; prm.g_psc = 8'd255; w = 4'd7; end
      if (in_valid) begin exp_t e; e = model(); e.t = cyc; q.push_back(e); end
    end
    @(negedge clk) in_valid = 0;
    repeat (15) @(posedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("FAIL: %0d results missing", q.size()); end
    checks++; if (n_spk == 0) begin failures++; $display("FAIL: no spike"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
