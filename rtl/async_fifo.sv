// async_fifo: dual-clock FIFO between the core and the QDR clock domain
// (the QDR WR_FIFO and RD_FIFO of the memory bus controller).
//
// Binary pointers one bit wider than the address count in each domain; their
// Gray-coded copies cross to the other domain through two flip-flops. The
// writer sees `full` and its own fill level wcount, the reader `empty`; both
// are conservative (a crossing pointer is at most two clocks old). rd_data
// shows the head while !empty (first-word fall-through). DEPTH must be a
// power of two. The paper only states that two asynchronous FIFOs are used;
// this Gray-pointer structure is the standard one chosen here.
module async_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  output logic         full,
  output logic [AW:0]  wcount,
  input  logic         rclk,
  input  logic         rrst_n,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty
);
  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, rbin, wgray, rgray, rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] g2b(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW-1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write domain
  assign full   = (wbin[AW-1:0] == g2b(rgray_w2)[AW-1:0]) && (wbin[AW] != g2b(rgray_w2)[AW]);
  assign wcount = wbin - g2b(rgray_w2);
  always_ff @(posedge wclk) if (push && !full) mem[wbin[AW-1:0]] <= wr_data;
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      if (push && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= (wbin + 1'b1) ^ ((wbin + 1'b1) >> 1);
      end
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  // read domain
  assign empty   = (rbin == g2b(wgray_r2));
  assign rd_data = mem[rbin[AW-1:0]];
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      if (pop && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= (rbin + 1'b1) ^ ((rbin + 1'b1) >> 1);
      end
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end
endmodule
