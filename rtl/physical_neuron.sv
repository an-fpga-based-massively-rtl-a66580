// physical_neuron: one stochastic conductance-based LIF neuron, pipelined.
//
// A PSC generator feeds a soma (paper Figure 4). Every clock a different TM
// neuron enters with its stored 8-bit state {Vmem, PSC}, its weighted input
// W(t), the parameters of its type and 10 random bits (5 for the PSC
// generator, 5 for the soma). The pipeline has 11 stages and never halts
// (paper: "an 11-stage pipeline without halt"); out_valid and the result
// appear exactly 11 clocks after in_valid. Stage 1 registers the inputs,
// stage 2 the new PSC, stage 3 the new Vmem and spike; stages 4-11 only
// delay. That split is this design's own. A disabled neuron (slot not used
// by any type, or a TM minicolumn with no DA minicolumn assigned) leaves the
// pipeline with the resting state {v_init, 0} and no spike.
module physical_neuron
  import cortex_pkg::*;
#(
  parameter int STAGES = 11
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      enable,
  input  nstate_t   state_in,
  input  logic [3:0] w,
  input  type_prm_t prm,
  input  logic [9:0] r,
  output logic      out_valid,
  output nstate_t   state_out,
  output logic      spike
);
  // stage 1
  logic      v1, en1;
  nstate_t   st1;
  logic [3:0] w1;
  type_prm_t p1;
  logic [9:0] r1;
  // stage 2
  logic      v2, en2;
  nstate_t   st2;
  type_prm_t p2;
  logic [4:0] r2;
  logic [3:0] psc2;
  // stage 3
  logic      v3, spk3;
  nstate_t   st3;

  logic [3:0] psc_n, v_n;
  logic       spk_n;

  psc_generator u_psc (
    .psc(st1.psc), .w(w1), .r(r1[4:0]), .l_epsc(p1.l_epsc), .l_ipsc(p1.l_ipsc),
    .g_syn(p1.g_syn), .psc_next(psc_n));

  soma u_soma (
    .v(st2.v), .psc_next(psc2), .r(r2), .l_mem(p2.l_mem), .l_rfc(p2.l_rfc),
    .g_psc(p2.g_psc), .v_init(p2.v_init), .v_next(v_n), .spike(spk_n));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; v3 <= v2;
    end
  end

  always_ff @(posedge clk) begin
    en1 <= enable; st1 <= state_in; w1 <= w; p1 <= prm; r1 <= r;
    en2 <= en1; st2 <= st1; p2 <= p1; r2 <= r1[9:5];
    psc2 <= en1 ? psc_n : 4'd0;
    spk3 <= en2 && spk_n;
    st3  <= en2 ? nstate_t'{v: v_n, psc: psc2} : nstate_t'{v: p2.v_init, psc: 4'd0};
  end

  // stages 4..STAGES: delay line
  localparam int D = STAGES - 3;
  logic [D-1:0]      dv, ds;
  nstate_t [D-1:0]   dst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dv <= '0;
    else        dv <= {dv[D-2:0], v3};
  end
  always_ff @(posedge clk) begin
    ds  <= {ds[D-2:0], spk3};
    dst <= {dst[D-2:0], st3};
  end

  assign out_valid = dv[D-1];
  assign spike     = ds[D-1];
  assign state_out = dst[D-1];
endmodule
