// soma: membrane update, refractory logic and spike generation of one neuron.
//
//   Vmem(t+1) = v_init + (Vmem(t) - v_init) * L/256 + r(t) + g_psc * PSC(t+1)   (paper Eq. 2)
//
// Vmem is 4 bits unsigned. The comparator of the paper decides the state:
// active when Vmem >= v_init, refractory otherwise. In the active state L is
// l_mem and the PSC is integrated; in the refractory state L is l_rfc and the
// PSC input is replaced by 0, so Vmem only relaxes back to v_init. The decay
// acts on the distance from v_init (the paper says Vmem decays to the initial
// value). Rounding is stochastic as in the PSC generator (5 random LSBs,
// floor). Control logic: an overflow above 15 caused by a positive PSC (EPSC)
// emits a spike and resets Vmem to 0; an underflow below 0 resets to 0; any
// other overflow saturates at 15. Reset value 0 and ">=" in the comparator are
// this design's choices. Purely combinational.
module soma (
  input  logic [3:0] v,
  input  logic [3:0] psc_next,
  input  logic [4:0] r,
  input  logic [7:0] l_mem,
  input  logic [7:0] l_rfc,
  input  logic [7:0] g_psc,
  input  logic [3:0] v_init,
  output logic [3:0] v_next,
  output logic       spike
);
  logic               active;
  logic signed [15:0] vdist, decay, drive, sum, vn;
  logic [7:0]         l;

  always_comb begin
    active = (v >= v_init);
    l      = active ? l_mem : l_rfc;
    vdist   = 16'(signed'({1'b0, v})) - 16'(signed'({1'b0, v_init}));
    decay  = (vdist * 16'(signed'({1'b0, l}))) >>> 3;
    drive  = active ? ((16'(signed'(psc_next)) * 16'(signed'({1'b0, g_psc}))) <<< 1) : 16'sd0;
    sum    = decay + 16'(signed'({1'b0, r})) + drive;
    vn     = 16'(signed'({1'b0, v_init})) + (sum >>> 5);
    spike  = 1'b0;
    if (vn > 16'sd15) begin
      if (active && !psc_next[3] && psc_next != 4'd0) begin
        spike  = 1'b1;
        v_next = 4'd0;
      end else begin
        v_next = 4'd15;
      end
    end else if (vn < 16'sd0) begin
      v_next = 4'd0;
    end else begin
      v_next = vn[3:0];
    end
  end
endmodule
