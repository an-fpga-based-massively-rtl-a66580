// psc_generator: post-synaptic current update of one physical neuron.
//
//   PSC(t+1) = PSC(t) * L/256 + r(t) + g_syn * W(t)                    (paper Eq. 1)
//
// PSC and W are signed 4-bit numbers with LSB 1/8 (range [-1, 1)). The
// leak rate L is tau/(tau+1) scaled to 8 bits and is taken from l_epsc when
// PSC(t) is positive or zero and from l_ipsc when it is negative (the mux of
// the paper's PSC generator). g_syn has LSB 1/16, so 8 bits span 0.06..16.
// The sum is formed with 5 fractional bits below the PSC LSB; the 5-bit
// random number r fills those bits and the sum is floored, which rounds
// stochastically: only the 4 MSBs are ever stored. The result saturates.
// The formula and the widths follow the paper; the sign-selected leak, the
// saturation and the exact fixed-point alignment are this design's choices.
// Purely combinational; the physical neuron registers around it.
module psc_generator (
  input  logic [3:0] psc,
  input  logic [3:0] w,
  input  logic [4:0] r,
  input  logic [7:0] l_epsc,
  input  logic [7:0] l_ipsc,
  input  logic [7:0] g_syn,
  output logic [3:0] psc_next
);
  logic signed [15:0] decay, drive, sum;
  logic [7:0] l;

  always_comb begin
    l     = psc[3] ? l_ipsc : l_epsc;
    // PSC * L / 256 expressed in units of 1/32 PSC LSB = PSC * L / 8
    decay = (16'(signed'(psc)) * 16'(signed'({1'b0, l}))) >>> 3;
    // g_syn/16 * W in units of 1/32 LSB = g_syn * W * 2
    drive = (16'(signed'(w)) * 16'(signed'({1'b0, g_syn}))) <<< 1;
    sum   = decay + 16'(signed'({1'b0, r})) + drive;
    psc_next = cortex_pkg::sat4(sum >>> 5);
  end
endmodule
