// parallel_cam: range look-up of DA minicolumn addresses.
//
// Stores N ascending thresholds A_0 <= A_1 <= ... in flip-flops (paper: 512
// 27-bit flip-flops) so that all of them can be compared with several
// inputs at once. For an address x it returns the index i with
// A_i <= x < A_(i+1), i.e. (number of thresholds <= x) - 1; that index
// selects the parameter and connection entries of a whole range of
// minicolumns. Thresholds must be written in ascending order; unwritten ones
// reset to all ones. Two query ports (minicolumn array, synapse array), each
// with a fixed latency of 3 clocks: compare, 16 partial counts, final sum.
module parallel_cam #(
  parameter int N  = 512,
  parameter int W  = 27,
  parameter int NQ = 2,
  localparam int IW = $clog2(N)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr,
  input  logic [IW-1:0]          wr_idx,
  input  logic [W-1:0]           wr_val,
  input  logic [NQ-1:0][W-1:0]   q_addr,
  output logic [NQ-1:0][IW-1:0]  q_idx
);
  localparam int NP = 16;              // partial counts in stage 2
  localparam int PL = (N + NP - 1) / NP;

  logic [W-1:0] thr [N];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int i = 0; i < N; i++) thr[i] <= '1;
    else if (wr) thr[wr_idx] <= wr_val;
  end

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic [N-1:0]            ge;
    logic [NP-1:0][IW:0]     part;
    always_ff @(posedge clk) begin
      for (int i = 0; i < N; i++) ge[i] <= (q_addr[q] >= thr[i]);
      for (int p = 0; p < NP; p++) begin
        logic [IW:0] c;
        c = '0;
        for (int k = 0; k < PL; k++)
          if (p*PL + k < N) c += (IW+1)'(ge[p*PL + k]);
        part[p] <= c;
      end
      begin
        logic [IW:0] s;
        s = '0;
        for (int p = 0; p < NP; p++) s += part[p];
        q_idx[q] <= (s == '0) ? '0 : IW'(s - 1'b1);
      end
    end
  end
endmodule
