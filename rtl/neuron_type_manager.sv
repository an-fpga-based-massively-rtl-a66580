// neuron_type_manager: assigns types, parameters and random numbers to the
// 100 physical neurons for the TM minicolumn being issued.
//
// A minicolumn holds up to 8 neuron types, and the number of neurons of each
// type is a multiple of 4, so the 100 neurons form 25 groups of 4 and the
// assignment is an 8-to-25 multiplexer (as in the paper): group g gets the
// first type t whose cumulative group count ngroup[0]+..+ngroup[t] exceeds
// g. Groups past the total are disabled. Each neuron then receives the
// parameter record of its group's type. The type of each group also goes to
// the events generator, which needs it to sum spikes per type.
// Every physical neuron owns a 32-bit Galois LFSR (x^32+x^22+x^2+x+1, seeds
// differ per neuron) stepped every clock; its 10 low bits are r(t) for the
// PSC generator and the soma. So the neurons of one TM minicolumn differ even
// with identical parameters. Timing: outputs are registered, one clock after
// `col` is presented. The LFSR polynomial and seeds are this design's choice.
module neuron_type_manager
  import cortex_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  col_prm_t                     col,
  output logic [N_GROUP-1:0][2:0]      type_of_group,
  output logic [N_GROUP-1:0]           group_en,
  output type_prm_t [N_NEURON-1:0]     prm,
  output logic [N_NEURON-1:0][9:0]     rnd
);
  logic [N_GROUP-1:0][2:0] tg;
  logic [N_GROUP-1:0]      ge;

  always_comb begin
    logic [7:0] cum [N_TYPE];
    cum[0] = 8'(col.ngroup[0]);
    for (int t = 1; t < N_TYPE; t++) cum[t] = cum[t-1] + 8'(col.ngroup[t]);
    for (int g = 0; g < N_GROUP; g++) begin
      tg[g] = 3'd0;
      ge[g] = 1'b0;
      for (int t = N_TYPE-1; t >= 0; t--) begin
        if (8'(g) < cum[t]) begin
          tg[g] = 3'(t);
          ge[g] = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    type_of_group <= tg;
    group_en      <= ge;
    for (int n = 0; n < N_NEURON; n++) prm[n] <= col.prm[tg[n/4]];
  end

  for (genvar n = 0; n < N_NEURON; n++) begin : g_rng
    logic [31:0] q;
    lfsr #(.W(32), .TAPS(32'h8020_0003), .SEED(32'h1234_5678 ^ (32'(n + 1) * 32'h9E37_79B9))) u_lfsr (
      .clk(clk), .rst_n(rst_n), .en(1'b1), .q(q));
    assign rnd[n] = q[9:0];
  end
endmodule
