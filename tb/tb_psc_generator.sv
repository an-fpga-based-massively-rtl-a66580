// tb_psc_generator: compares the PSC update (paper Eq. 1) with an integer
// reference model for 20000 random operand sets plus the saturation corners.
module tb_psc_generator;
  logic [3:0] psc, w, psc_next;
  logic [4:0] r;
  logic [7:0] l_epsc, l_ipsc, g_syn;
  int checks = 0, failures = 0;
  psc_generator dut (.*);
  function automatic int sx4(input logic [3:0] x); return x[3] ? int'(x) - 16 : int'(x); endfunction
  function automatic int ref_psc();
    int p, l, s;
    p = sx4(psc);
    l = (p < 0) ? int'(l_ipsc) : int'(l_epsc);
    s = ((p * l) >>> 3) + int'(r) + ((sx4(w) * int'(g_syn)) * 2);
    s = s >>> 5;
    if (s > 7) s = 7;
    if (s < -8) s = -8;
    return s;
  endfunction
  initial begin : watchdog #1ms; $display("FAIL: watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish; end
  initial begin
    for (int n = 0; n < 20000; n++) begin
      {psc, w} = 8'($urandom); r = 5'($urandom);
      l_epsc = 8'($urandom); l_ipsc = 8'($urandom); g_syn = 8'($urandom);
      if (n == 0) begin psc = 4'd7; w = 4'd7; g_syn = 8'hFF; r = 5'd31; end
      if (n == 1) begin psc = 4'h8; w = 4'h8; g_syn = 8'hFF; r = 5'd0; end
      #1;
      checks++;
      if (sx4(psc_next) != ref_psc()) begin
        failures++;
        if (failures < 5) $display("FAIL psc=%0d w=%0d r=%0d got %0d exp %0d", sx4(psc), sx4(w), r, sx4(psc_next), ref_psc());
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
