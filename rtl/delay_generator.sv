// delay_generator: stochastic choice of the axonal delay to read next.
//
// Every clock a 20-bit LFSR value v is compared with 17 ascending thresholds
// T_0..T_16; the delay index i (0..15 for 1..16 ms) with T_i <= v < T_(i+1)
// is selected. With T_(i+1) - T_i proportional to 1/(i+1) (paper Eqs. 3-4),
// events of delay d are read at a rate proportional to 1/d, so the mean time
// an event waits in its region scales with d. A second, 10-bit LFSR scales
// all rates by the global probability f: a selection is valid only when
// f <= LFSR10 (as in the paper), so f = 0 reads fastest. Both LFSRs use
// maximal-length polynomials (x^20+x^17+1, x^10+x^7+1; this design's choice).
// Timing: sel/sel_valid are registered, one new selection per clock.
module delay_generator
  import cortex_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [16:0][19:0]   thr,
  input  logic [9:0]          f,
  output logic                sel_valid,
  output logic [3:0]          sel
);
  logic [19:0] r20;
  logic [9:0]  r10;

  lfsr #(.W(20), .TAPS(20'h90000), .SEED(20'h5A5A5)) u_l20 (.clk(clk), .rst_n(rst_n), .en(1'b1), .q(r20));
  lfsr #(.W(10), .TAPS(10'h240),   .SEED(10'h2B7))   u_l10 (.clk(clk), .rst_n(rst_n), .en(1'b1), .q(r10));

  logic       hit;
  logic [3:0] idx;
  always_comb begin
    hit = 1'b0;
    idx = 4'd0;
    for (int i = 0; i < N_DELAY; i++)
      if (r20 >= thr[i] && r20 < thr[i+1]) begin
        hit = 1'b1;
        idx = 4'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sel_valid <= 1'b0;
      sel       <= '0;
    end else begin
      sel_valid <= hit && (f <= r10);
      sel       <= idx;
    end
  end
endmodule
