// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for every on-chip FIFO of the simulator (TX_FIFO, Delay_FIFOs,
// RX_FIFO, PRE_FIFO, IN_FIFOs, DDR RD/WR FIFOs, SPK_FIFO). Storage is a plain
// array; rd_data shows the head while !empty, and a pop and a push may happen
// in the same cycle. `count` gives the fill level used by the flow-control
// rules (almost full, maximum usage, 95 % threshold).
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  count
);
  logic [W-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_push = push && !full;
  wire do_pop  = pop && !empty;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign rd_data = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= wr_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // A push into a full FIFO loses data: the surrounding flow control must prevent it.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop));
endmodule
