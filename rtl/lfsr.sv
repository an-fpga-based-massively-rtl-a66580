// lfsr: Galois linear feedback shift register, one step per enabled clock.
//
// Random-number source for the stochastic parts of the simulator: the
// per-neuron r(t) of the neuron-type manager and the 20-bit and 10-bit LFSRs
// of the delay generator. TAPS is the feedback mask (maximal-length
// polynomials are chosen by the instantiating module); SEED must be non-zero.
module lfsr #(
  parameter int          W    = 20,
  parameter logic [W-1:0] TAPS = W'(20'h90000),
  parameter logic [W-1:0] SEED = W'(1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  output logic [W-1:0] q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  q <= SEED;
    else if (en) q <= q[0] ? ((q >> 1) ^ TAPS) : (q >> 1);
  end
endmodule
