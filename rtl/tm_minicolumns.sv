// tm_minicolumns: the physical minicolumn (100 physical neurons) and the
// global counter that time-multiplexes it over the TM minicolumns.
//
// The global counter names the TM minicolumn issued in this clock. It steps
// once per `step` and wraps after num_tm TM minicolumns; `seg_last` marks the
// last TM minicolumn of a 1k segment. The 100 neurons take one TM minicolumn
// per clock in parallel (state, weights, parameters and random numbers for
// all 100 neurons) and return its new states and spikes 11 clocks later. The
// counter and the neurons are separated in time by the parameter fetch in
// the minicolumn array, so they have independent inputs here.
module tm_minicolumns
  import cortex_pkg::*;
(
  input  logic                           clk,
  input  logic                           rst_n,
  // global counter
  input  logic                           step,
  input  logic [TM_BITS:0]               num_tm,
  output logic [TM_BITS-1:0]             tm_idx,
  output logic                           seg_last,
  output logic                           cycle_last,
  // physical minicolumn
  input  logic                           in_valid,
  input  logic [N_NEURON-1:0]            enable,
  input  nstate_t [N_NEURON-1:0]         state_in,
  input  logic [N_NEURON-1:0][3:0]       w,
  input  type_prm_t [N_NEURON-1:0]       prm,
  input  logic [N_NEURON-1:0][9:0]       rnd,
  output logic                           out_valid,
  output nstate_t [N_NEURON-1:0]         state_out,
  output logic [N_NEURON-1:0]            spikes
);
  assign seg_last   = (tm_idx[9:0] == 10'h3FF);
  assign cycle_last = ((TM_BITS+1)'(tm_idx) == num_tm - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    tm_idx <= '0;
    else if (step) tm_idx <= cycle_last ? '0 : tm_idx + 1'b1;
  end

  logic [N_NEURON-1:0] ov;
  for (genvar n = 0; n < N_NEURON; n++) begin : g_n
    physical_neuron u_n (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .enable(enable[n]),
      .state_in(state_in[n]), .w(w[n]), .prm(prm[n]), .r(rnd[n]),
      .out_valid(ov[n]), .state_out(state_out[n]), .spike(spikes[n]));
  end
  assign out_valid = ov[0];
endmodule
