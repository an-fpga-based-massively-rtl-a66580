// fast_cam: the search memory of an arbiter.
//
// Holds N_BANK*BANK_DEPTH keys (8k 20-bit keys, one per group of 8 TM
// minicolumns) in N_BANK single-port SRAMs of BANK_DEPTH words, as the paper
// describes (128 SRAMs of 64x20 bits). Entry e lives in bank e[6:0], row
// e[12:7]. A search reads the same row of all banks in one clock and compares
// the 128 keys in the next, so a search ends within BANK_DEPTH+1 clocks
// (paper: "The maximum search time is thus reduced to 64 clock cycles").
// The lowest matching entry wins. A valid bit per entry (flip-flops) marks
// assigned entries. Other operations take priority over a search step, which
// then waits a clock: `rd` reads the key of entry rd_idx (rd_key valid one
// clock later), `wr` writes a key and sets the entry valid, `clr` clears it.
// Handshake: pulse `search` with `key` while !search_busy; `done` pulses with
// hit/hit_idx.
module fast_cam #(
  parameter int KEY_W      = 20,
  parameter int N_BANK     = 128,
  parameter int BANK_DEPTH = 64,
  localparam int BW        = $clog2(N_BANK),
  localparam int RW        = $clog2(BANK_DEPTH),
  localparam int IW        = BW + RW
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             search,
  input  logic [KEY_W-1:0] key,
  output logic             search_busy,
  output logic             done,
  output logic             hit,
  output logic [IW-1:0]    hit_idx,
  input  logic             wr,
  input  logic [IW-1:0]    wr_idx,
  input  logic [KEY_W-1:0] wr_key,
  input  logic             clr,
  input  logic [IW-1:0]    clr_idx,
  input  logic             rd,
  input  logic [IW-1:0]    rd_idx,
  output logic [KEY_W-1:0] rd_key,
  output logic [N_BANK*BANK_DEPTH-1:0] valid
);
  logic [KEY_W-1:0] mem [N_BANK][BANK_DEPTH];
  logic [N_BANK-1:0][KEY_W-1:0] q;
  logic [KEY_W-1:0] skey;
  logic [RW-1:0]    srow, crow;
  logic             active, cmp_v, last_cmp, rd_d;
  logic [BW-1:0]    rd_bank_d;

  wire step = active && !rd && !wr;          // a search row read this clock
  logic [RW-1:0] row;
  assign row = rd ? rd_idx[IW-1:BW] : srow;

  always_ff @(posedge clk) begin
    for (int b = 0; b < N_BANK; b++) begin
      if (wr && wr_idx[BW-1:0] == BW'(b)) mem[b][wr_idx[IW-1:BW]] <= wr_key;
      else q[b] <= mem[b][row];
    end
  end

  // compare stage
  logic          m_any;
  logic [BW-1:0] m_bank;
  always_comb begin
    m_any = 1'b0; m_bank = '0;
    for (int b = N_BANK-1; b >= 0; b--)
      if (valid[{crow, BW'(b)}] && q[b] == skey) begin
        m_any = 1'b1; m_bank = BW'(b);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cmp_v <= 1'b0; last_cmp <= 1'b0; done <= 1'b0; hit <= 1'b0;
      hit_idx <= '0; srow <= '0; crow <= '0; skey <= '0; valid <= '0; rd_d <= 1'b0; rd_bank_d <= '0;
    end else begin
      done  <= 1'b0;
      cmp_v <= step;
      rd_d  <= rd;
      rd_bank_d <= rd_idx[BW-1:0];
      if (step) begin
        crow     <= srow;
        last_cmp <= (srow == RW'(BANK_DEPTH-1));
        srow     <= srow + 1'b1;
      end
      if (search && !search_busy) begin
        active <= 1'b1; skey <= key; srow <= '0;
      end else if (cmp_v && active && (m_any || last_cmp)) begin
        active  <= 1'b0;
        done    <= 1'b1;
        hit     <= m_any;
        hit_idx <= {crow, m_bank};
      end
      if (wr)  valid[wr_idx]  <= 1'b1;
      if (clr) valid[clr_idx] <= 1'b0;
    end
  end

  assign search_busy = active || cmp_v;
  assign rd_key = q[rd_bank_d];
endmodule
