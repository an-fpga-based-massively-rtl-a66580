// tb_soma: compares the membrane update (paper Eq. 2), the refractory
// comparator and the spike / reset rules with an integer reference model for
// 20000 random operand sets, and checks that spikes do occur.
module tb_soma;
  logic [3:0] v, psc_next, v_init, v_next;
  logic [4:0] r;
  logic [7:0] l_mem, l_rfc, g_psc;
  logic       spike;
  int checks = 0, failures = 0, n_spk = 0, n_rfc = 0;
  soma dut (.*);
  function automatic int sx4(input logic [3:0] x); return x[3] ? int'(x) - 16 : int'(x); endfunction
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    for (int n = 0; n < 20000; n++) begin
      int act, s, vn, ev; bit es;
      {v, psc_next, v_init} = 12'($urandom); r = 5'($urandom);
      l_mem = 8'($urandom); l_rfc = 8'($urandom); g_psc = 8'($urandom);
      #1;
      act = (v >= v_init);
      if (!act) n_rfc++;
      s  = (((int'(v) - int'(v_init)) * (act ? int'(l_mem) : int'(l_rfc))) >>> 3) + int'(r)
         + (act ? sx4(psc_next) * int'(g_psc) * 2 : 0);
      vn = int'(v_init) + (s >>> 5);
      es = 0;
      if (vn > 15) begin
        if (act && sx4(psc_next) > 0) begin es = 1; ev = 0; end else ev = 15;
      end else if (vn < 0) ev = 0;
      else ev = vn;
      checks++;
      if (spike !== es || int'(v_next) != ev) begin
        failures++;
        if (failures < 5) $display("FAIL v=%0d psc=%0d vi=%0d: got %0d/%0b exp %0d/%0b", v, sx4(psc_next), v_init, v_next, spike, ev, es);
      end
      if (spike) n_spk++;
    end
    checks++; if (n_spk == 0 || n_rfc == 0) begin failures++; $display("FAIL: no spike or no refractory case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
