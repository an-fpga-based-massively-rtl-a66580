// events_generator: per-type spike counts of one TM minicolumn (the
// "Normaliser" of the minicolumn array).
//
// The 100 spikes of the physical minicolumn are summed per neuron type with
// eight parallel adders of 25 inputs each (one input per group of 4 neurons)
// in a 3-stage pipeline, and each sum is limited to 4 bits (saturates at 15),
// as the paper describes. Stage 1 forms the 25 group counts (0..4) masked by
// type, stage 2 adds them in 5 partial sums of 5, stage 3 adds the partial
// sums and saturates. The group types arrive aligned with the spikes.
// Latency: counts are valid 3 clocks after in_valid.
module events_generator
  import cortex_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [N_NEURON-1:0]      spikes,
  input  logic [N_GROUP-1:0][2:0]  type_of_group,
  input  logic [N_GROUP-1:0]       group_en,
  output logic                     out_valid,
  output logic [N_TYPE-1:0][3:0]   counts
);
  logic [N_TYPE-1:0][N_GROUP-1:0][2:0] s1;
  logic [N_TYPE-1:0][4:0][4:0]         s2;
  logic [2:0] v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[1:0], in_valid};
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < N_TYPE; t++)
      for (int g = 0; g < N_GROUP; g++)
        s1[t][g] <= (group_en[g] && type_of_group[g] == 3'(t))
                  ? 3'(spikes[4*g]) + 3'(spikes[4*g+1]) + 3'(spikes[4*g+2]) + 3'(spikes[4*g+3]) : 3'd0;
    for (int t = 0; t < N_TYPE; t++)
      for (int p = 0; p < 5; p++)
        s2[t][p] <= 5'(s1[t][5*p]) + 5'(s1[t][5*p+1]) + 5'(s1[t][5*p+2]) + 5'(s1[t][5*p+3]) + 5'(s1[t][5*p+4]);
    for (int t = 0; t < N_TYPE; t++) begin
      logic [6:0] sum;
      sum = 7'(s2[t][0]) + 7'(s2[t][1]) + 7'(s2[t][2]) + 7'(s2[t][3]) + 7'(s2[t][4]);
      counts[t] <= (sum > 7'd15) ? 4'd15 : sum[3:0];
    end
  end

  assign out_valid = v[2];
endmodule
