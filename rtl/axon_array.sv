// axon_array: programmable axonal delays through off-chip DDR memory.
//
// TX phase. The event MUX puts events into TX_FIFO: events of the minicolumn
// array are written at once, external events wait while an internal one is
// present (ext_ready low). Events marked remote are also copied to the
// external interface. Each TX_FIFO event is expanded into one pre-synaptic
// event per hypercolumn connection k < nconn, tagged with k, and pushed into
// Delay_FIFO[delay[k]] (delay index 0..15 stands for 1..16 ms). When the
// Master grants the DDR bus and the RX phase is inactive, the TX state
// machine picks the Delay_FIFO with the highest usage and writes up to
// MAX_BURST of its events to that delay's region of the DDR memories: odd
// delays (index 0,2,..) live in DDR_A, even ones in DDR_B, eight circular
// regions per DDR above the 512k words kept for neural states.
// RX phase. Once the TX phase has started (or all Delay_FIFOs are empty) the
// RX state machine reads, for RX_BURST clocks, from the other DDR: each clock
// the delay generator proposes a delay; if its region is in that DDR, holds
// events and RX_FIFO has room, one event is read. Read data goes to RX_FIFO,
// which the synapse array drains. TX does not start while RX is active
// (cross-lock), so the two phases never use the same DDR at once.
// One event occupies one 512-bit DDR word (bits 62:0); this packing, the
// burst sizes and the FIFO depths are this design's choices; the structure,
// the MAX-usage selection, the odd/even DDR split and the handshake follow
// the paper. `busy` tells the Master the axon array still needs the bus.
module axon_array
  import cortex_pkg::*;
#(
  parameter int TX_DEPTH     = 512,
  parameter int DLY_DEPTH    = 64,
  parameter int RX_DEPTH     = 256,
  parameter int MAX_BURST    = 32,
  parameter int RX_BURST     = 32,
  parameter int REGION_DEPTH = 16711680,   // (128M - 512k) / 8 words per region
  parameter int STATE_WORDS  = 524288      // lowest 512k words hold neural states
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // event MUX
  input  logic                 mc_ev_valid,
  input  post_ev_t             mc_ev,
  input  logic                 ext_ev_valid,
  input  post_ev_t             ext_ev,
  output logic                 ext_ev_ready,
  output logic                 remote_valid,
  output post_ev_t             remote_ev,
  output logic [$clog2(TX_DEPTH):0] tx_count,
  // delay generator configuration
  input  logic [16:0][19:0]    thr,
  input  logic [9:0]           f,
  // DDR access through the memory bus controller
  input  logic                 grant,     // the DDR bus belongs to the axon array
  input  logic                 stop,      // start no new phase: the slot is ending
  output logic                 busy,      // events are waiting for the bus
  output logic                 quiet,     // no phase in progress
  output logic                 tx_done,
  output logic [1:0]           ddr_req_valid,
  output ddr_req_t [1:0]       ddr_req,
  input  logic [1:0]           ddr_req_ready,
  input  logic [1:0]           ddr_rd_valid,
  input  logic [1:0][DDR_W-1:0] ddr_rd_data,
  // to the synapse array
  output logic                 rx_valid,
  output pre_ev_t              rx_ev,
  input  logic                 rx_pop
);
  localparam int DAW = $clog2(DLY_DEPTH);
  localparam int RAW = $clog2(RX_DEPTH);

  // ------------------------------------------------------------ event MUX
  logic     tx_push, tx_full, tx_empty, tx_pop;
  post_ev_t tx_in, tx_head;
  assign ext_ev_ready = !mc_ev_valid && !tx_full;
  assign tx_push      = mc_ev_valid || (ext_ev_valid && ext_ev_ready);
  assign tx_in        = mc_ev_valid ? mc_ev : ext_ev;
  assign remote_valid = mc_ev_valid && mc_ev.post.remote;
  assign remote_ev    = mc_ev;

  sync_fifo #(.W($bits(post_ev_t)), .DEPTH(TX_DEPTH)) u_tx_fifo (
    .clk(clk), .rst_n(rst_n), .push(tx_push), .wr_data(tx_in), .pop(tx_pop),
    .rd_data(tx_head), .full(tx_full), .empty(tx_empty), .count(tx_count));

  // ------------------------------------------------------------ expansion into Delay_FIFOs
  logic [3:0]              k;
  logic [N_DELAY-1:0]      d_push, d_pop, d_full, d_empty;
  pre_ev_t [N_DELAY-1:0]   d_head;
  logic [N_DELAY-1:0][DAW:0] d_count;
  pre_ev_t                 d_in;
  logic [3:0]              d_sel;
  logic                    exp_go;

  assign d_sel  = tx_head.post.delay[k];
  assign d_in   = pre_ev_t'{src: tx_head.src, conn: k, count: tx_head.count};
  assign exp_go = !tx_empty && (tx_head.post.nconn == 5'd0 || !d_full[d_sel]);
  assign tx_pop = exp_go && (tx_head.post.nconn == 5'd0 || 5'(k) == tx_head.post.nconn - 1'b1);
  always_comb begin
    d_push = '0;
    if (exp_go && tx_head.post.nconn != 5'd0) d_push[d_sel] = 1'b1;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      k <= '0;
    else if (tx_pop) k <= '0;
    else if (exp_go) k <= k + 1'b1;
  end

  for (genvar i = 0; i < N_DELAY; i++) begin : g_dly
    sync_fifo #(.W($bits(pre_ev_t)), .DEPTH(DLY_DEPTH)) u_dly (
      .clk(clk), .rst_n(rst_n), .push(d_push[i]), .wr_data(d_in), .pop(d_pop[i]),
      .rd_data(d_head[i]), .full(d_full[i]), .empty(d_empty[i]), .count(d_count[i]));
  end

  // ------------------------------------------------------------ DDR regions
  logic [N_DELAY-1:0][23:0] wr_ptr, rd_ptr, r_cnt;
  function automatic logic [DDR_ADDR_W-1:0] region_addr(input logic [3:0] i, input logic [23:0] p);
    return DDR_ADDR_W'(STATE_WORDS) + DDR_ADDR_W'(i[3:1]) * DDR_ADDR_W'(REGION_DEPTH) + DDR_ADDR_W'(p);
  endfunction
  function automatic logic [23:0] inc_ptr(input logic [23:0] p);
    return (p == 24'(REGION_DEPTH - 1)) ? 24'd0 : p + 24'd1;
  endfunction

  // ------------------------------------------------------------ TX state machine
  typedef enum logic [1:0] {TX_IDLE, TX_WRITE} tx_state_e;
  typedef enum logic [1:0] {RX_IDLE, RX_READ, RX_WAIT} rx_state_e;
  tx_state_e tx_st;
  rx_state_e rx_st;
  logic [3:0] tx_q;            // selected Delay_FIFO
  logic [6:0] tx_n;            // events left in this burst
  logic       tx_started;      // a TX phase started since the last RX phase
  logic       tx_ddr, rx_ddr;
  logic [3:0] max_i;
  logic [DAW:0] max_c;

  always_comb begin
    max_i = '0; max_c = '0;
    for (int i = 0; i < N_DELAY; i++)
      if (d_count[i] > max_c && r_cnt[i] != 24'(REGION_DEPTH)) begin
        max_c = d_count[i]; max_i = 4'(i);
      end
  end

  wire tx_issue = (tx_st == TX_WRITE) && ddr_req_ready[tx_ddr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_st <= TX_IDLE; tx_q <= '0; tx_n <= '0; tx_ddr <= 1'b0; tx_done <= 1'b0;
    end else begin
      tx_done <= 1'b0;
      case (tx_st)
        TX_IDLE: if (grant && !stop && rx_st == RX_IDLE && !tx_started && max_c != '0) begin
          tx_st  <= TX_WRITE;
          tx_q   <= max_i;
          tx_ddr <= max_i[0];
          tx_n   <= (max_c > (DAW+1)'(MAX_BURST)) ? 7'(MAX_BURST) : 7'(max_c);
        end
        TX_WRITE: if (tx_issue) begin
          tx_n <= tx_n - 1'b1;
          if (tx_n == 7'd1) begin
            tx_st   <= TX_IDLE;
            tx_done <= 1'b1;
          end
        end
        default: tx_st <= TX_IDLE;
      endcase
    end
  end

  always_comb begin
    d_pop = '0;
    if (tx_issue) d_pop[tx_q] = 1'b1;
  end

  // ------------------------------------------------------------ RX state machine
  logic       sel_v;
  logic [3:0] sel;
  delay_generator u_dgen (.clk(clk), .rst_n(rst_n), .thr(thr), .f(f), .sel_valid(sel_v), .sel(sel));

  logic [5:0]  rx_t;
  logic [RAW:0] rx_out;       // reads in flight
  logic        rf_full, rf_empty;
  logic [RAW:0] rf_count;
  logic        rx_issue;

  assign rx_issue = (rx_st == RX_READ) && grant && sel_v && (sel[0] == rx_ddr) && (r_cnt[sel] != '0)
                  && ((rf_count + rx_out) < (RAW+1)'(RX_DEPTH)) && ddr_req_ready[rx_ddr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_st <= RX_IDLE; rx_t <= '0; rx_ddr <= 1'b1; tx_started <= 1'b0; rx_out <= '0;
    end else begin
      rx_out <= rx_out + (RAW+1)'(rx_issue) - (RAW+1)'(ddr_rd_valid[rx_ddr] && rx_st != RX_IDLE);
      if (tx_st == TX_IDLE && grant && !stop && rx_st == RX_IDLE && !tx_started && max_c != '0) tx_started <= 1'b1;
      case (rx_st)
        RX_IDLE: if (grant && !stop && (tx_started || d_empty == '1)
                              && (rf_count < (RAW+1)'(RX_DEPTH))) begin
          rx_st  <= RX_READ;
          rx_t   <= '0;
          rx_ddr <= tx_started ? !tx_ddr : !rx_ddr;
        end
        RX_READ: begin
          rx_t <= rx_t + 1'b1;
          if (rx_t == 6'(RX_BURST - 1) || stop) rx_st <= RX_WAIT;
        end
        RX_WAIT: if (rx_out == '0 || (rx_out == (RAW+1)'(1) && ddr_rd_valid[rx_ddr])) begin
          rx_st      <= RX_IDLE;
          tx_started <= 1'b0;
        end
        default: rx_st <= RX_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ region pointers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; r_cnt <= '0;
    end else begin
      for (int i = 0; i < N_DELAY; i++) begin
        logic w, r;
        w = tx_issue && tx_q == 4'(i);
        r = rx_issue && sel == 4'(i);
        if (w) wr_ptr[i] <= inc_ptr(wr_ptr[i]);
        if (r) rd_ptr[i] <= inc_ptr(rd_ptr[i]);
        r_cnt[i] <= r_cnt[i] + 24'(w) - 24'(r);
      end
    end
  end

  // ------------------------------------------------------------ DDR requests
  always_comb begin
    ddr_req_valid = '0;
    ddr_req       = '0;
    if (tx_st == TX_WRITE) begin
      ddr_req_valid[tx_ddr]  = 1'b1;
      ddr_req[tx_ddr].we     = 1'b1;
      ddr_req[tx_ddr].addr   = region_addr(tx_q, wr_ptr[tx_q]);
      ddr_req[tx_ddr].wdata  = DDR_W'(d_head[tx_q]);
    end
    if (rx_issue) begin
      ddr_req_valid[rx_ddr]  = 1'b1;
      ddr_req[rx_ddr].we     = 1'b0;
      ddr_req[rx_ddr].addr   = region_addr(sel, rd_ptr[sel]);
    end
  end

  // ------------------------------------------------------------ RX_FIFO
  logic [DDR_W-1:0] rdd;
  assign rdd = ddr_rd_data[rx_ddr];
  sync_fifo #(.W($bits(pre_ev_t)), .DEPTH(RX_DEPTH)) u_rx_fifo (
    .clk(clk), .rst_n(rst_n), .push(ddr_rd_valid[rx_ddr] && rx_st != RX_IDLE),
    .wr_data(rdd[$bits(pre_ev_t)-1:0]), .pop(rx_pop),
    .rd_data(rx_ev), .full(rf_full), .empty(rf_empty), .count(rf_count));
  assign rx_valid = !rf_empty;

  assign busy  = (d_empty != '1) || (r_cnt != '0);
  assign quiet = (tx_st == TX_IDLE) && (rx_st == RX_IDLE);

  a_cross_lock: assert property (@(posedge clk) disable iff (!rst_n)
    (tx_st == TX_WRITE && rx_st == RX_READ) |-> (tx_ddr != rx_ddr));
endmodule
