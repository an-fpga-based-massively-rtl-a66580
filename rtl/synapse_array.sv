// synapse_array: turns delayed events into weighted input for destination
// minicolumns and hands them to the 16 arbiters.
//
// State machine: every SLOT (4) clocks, when the Master enables it, RX_FIFO
// holds an event and PRE_FIFO has room, one pre-synaptic event {source DA
// address, connection index k, 8 spike counts} is read and its source
// address and k go to the parameter LUT (LUT_LAT clocks).
// Synaptic weight modulator: each spike count is multiplied by the weight of
// its source type; for every destination type d the products whose bit
// mask[d][s] is set (neuron-connection buffer, 64 connections between two
// minicolumns) are summed and saturated to a signed 4-bit W[d].
// Address mapper: destination hypercolumn = source hypercolumn + offset,
// wrapping at 2^20 (offset 0 gives recurrent connections). The size of the
// connection (up to 128 minicolumns) is processed as 32 destinations per
// clock over the fixed 4-clock slot (e.g. 80 -> 32, 32, 16, 0); each
// non-empty slot clock writes one destination group {hc, first minicolumn,
// count, hc size, W} into PRE_FIFO. Destinations are consecutive minicolumns
// (mod hc size) from a start that is a hash of the source address and k, so
// an event always reaches the same minicolumns.
// Demux: the head of PRE_FIFO goes to the arbiter named by the top 4 address
// bits (hc[19:16]) when that arbiter's IN_FIFO has room. Mux: read-out and
// activity reports of TM index i go to arbiter i[3:0] with local index
// i[19:4]; the read-out answer returns one clock later.
// The latency from reading an event to its first PRE_FIFO write is 12 clocks
// (paper: 12-stage pipeline). The hash and the group encoding are this
// design's choices.
module synapse_array
  import cortex_pkg::*;
#(
  parameter int LUT_LAT    = 5,
  parameter int PRE_DEPTH  = 64,
  parameter int IN_DEPTH   = 16,
  parameter int N_BANK     = 128,
  parameter int BANK_DEPTH = 64,
  localparam int EW        = $clog2(N_BANK * BANK_DEPTH)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   enable,     // from the Master
  input  logic [EW:0]            n_entry,
  // from the axon array
  input  logic                   rx_valid,
  input  pre_ev_t                rx_ev,
  output logic                   rx_pop,
  // parameter LUT
  output logic [DA_W-1:0]        lut_addr,
  output logic [3:0]             lut_conn,
  input  pre_prm_t               lut_pre,
  input  ncon_t                  lut_ncon,
  // read-out and activity from / to the minicolumn array
  input  logic                   ro_req,
  input  logic [TM_BITS-1:0]     ro_idx,
  output logic [N_TYPE-1:0][3:0] ro_w,
  output logic [DA_W-1:0]        ro_addr,
  output logic                   ro_assigned,
  input  logic                   act_valid,
  input  logic [TM_BITS-1:0]     act_idx,
  input  logic                   act_active,
  // to the Master: some arbiter IN_FIFO is almost full
  output logic                   arb_almost_full,
  // statistics
  output logic [N_ARB-1:0]       st_bypass,
  output logic [N_ARB-1:0]       st_assign,
  output logic [N_ARB-1:0]       st_drop
);
  // ------------------------------------------------------------ state machine
  logic [1:0] slot_t;
  logic       pre_room;
  logic [$clog2(PRE_DEPTH):0] pre_count;
  assign pre_room = pre_count <= ($clog2(PRE_DEPTH)+1)'(PRE_DEPTH - 24);
  assign rx_pop   = (slot_t == 2'd0) && enable && rx_valid && pre_room;
  assign lut_addr = rx_ev.src;
  assign lut_conn = rx_ev.conn;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        slot_t <= '0;
    else if (rx_pop || slot_t != 2'd0) slot_t <= slot_t + 1'b1;
  end

  // event waits for the LUT
  logic    [LUT_LAT-1:0] lv;
  pre_ev_t               le [LUT_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lv <= '0;
    else        lv <= {lv[LUT_LAT-2:0], rx_pop};
  end
  always_ff @(posedge clk) begin
    le[0] <= rx_ev;
    for (int k = 1; k < LUT_LAT; k++) le[k] <= le[k-1];
  end
  pre_ev_t e;
  assign e = le[LUT_LAT-1];

  // ------------------------------------------------------------ modulator + mapper, stage A
  logic                          av;
  logic [N_TYPE-1:0][N_TYPE-1:0][11:0] prod;   // [d][s]
  logic [HC_W-1:0]               a_hc;
  logic [7:0]                    a_size, a_hcs, a_start;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) av <= 1'b0;
    else        av <= lv[LUT_LAT-1];
  end
  always_ff @(posedge clk) begin
    for (int d = 0; d < N_TYPE; d++)
      for (int s = 0; s < N_TYPE; s++)
        prod[d][s] <= lut_ncon[d][s] ? 12'(signed'(lut_pre.weight[s]) * signed'({1'b0, e.count[s]})) : 12'd0;
    a_hc    <= HC_W'(e.src[DA_W-1:MC_W] + lut_pre.offset);
    a_size  <= (lut_pre.size > 8'd128) ? 8'd128 : lut_pre.size;
    a_hcs   <= (lut_pre.hc_size == 8'd0) ? 8'd1 : lut_pre.hc_size;
    a_start <= hash8(e.src, e.conn);
  end

  function automatic logic [7:0] hash8(input logic [DA_W-1:0] a, input logic [3:0] c);
    logic [31:0] h;
    h = (32'(a) ^ (32'(c) << 27)) * 32'h9E37_79B1;
    return h[31:24];
  endfunction

  // ------------------------------------------------------------ stage B: sums, start mod hc size
  logic                   bv;
  logic [N_TYPE-1:0][3:0] b_w;
  logic [HC_W-1:0]        b_hc;
  logic [7:0]             b_size, b_hcs, b_start;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) bv <= 1'b0;
    else        bv <= av;
  end
  always_ff @(posedge clk) begin
    for (int d = 0; d < N_TYPE; d++) begin
      logic signed [15:0] acc;
      acc = '0;
      for (int s = 0; s < N_TYPE; s++) acc += 16'(signed'(prod[d][s]));
      b_w[d] <= sat4(acc);
    end
    b_hc <= a_hc; b_size <= a_size; b_hcs <= a_hcs;
    b_start <= a_start % a_hcs;
  end

  // ------------------------------------------------------------ slot: 32 destinations per clock
  logic             s_act;
  logic [1:0]       s_c;
  dst_grp_t         s_base;
  logic [7:0]       s_left, s_pos;
  logic             g_v;
  dst_grp_t         g_out;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_act <= 1'b0; s_c <= '0; s_base <= '0; s_left <= '0; s_pos <= '0;
    end else if (bv) begin
      s_act <= 1'b1; s_c <= '0; s_left <= b_size; s_pos <= b_start;
      s_base <= dst_grp_t'{hc: b_hc, base: '0, count: '0, hc_size: b_hcs, w: b_w};
    end else if (s_act) begin
      logic [8:0] np;
      s_c    <= s_c + 1'b1;
      s_left <= (s_left > 8'd32) ? s_left - 8'd32 : 8'd0;
      np     = (9'(s_pos) + 9'd32) % 9'(s_base.hc_size);
      s_pos  <= np[7:0];
      if (s_c == 2'd3) s_act <= 1'b0;
    end
  end
  always_comb begin
    g_v   = s_act && s_left != 8'd0;
    g_out = s_base;
    g_out.base  = s_pos[6:0];
    g_out.count = (s_left > 8'd32) ? 6'd32 : 6'(s_left);
  end

  // pad to the 12-stage pipeline (1 read + LUT_LAT + 2 + slot + 3 delay)
  localparam int PAD = 12 - (LUT_LAT + 4);
  logic     [PAD-1:0] pv;
  dst_grp_t           pg [PAD];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else        pv <= {pv[PAD-2:0], g_v};
  end
  always_ff @(posedge clk) begin
    pg[0] <= g_out;
    for (int k = 1; k < PAD; k++) pg[k] <= pg[k-1];
  end

  // ------------------------------------------------------------ PRE_FIFO and demux
  dst_grp_t pre_head;
  logic     pre_empty, pre_full, pre_pop;
  sync_fifo #(.W($bits(dst_grp_t)), .DEPTH(PRE_DEPTH)) u_pre (
    .clk(clk), .rst_n(rst_n), .push(pv[PAD-1]), .wr_data(pg[PAD-1]), .pop(pre_pop),
    .rd_data(pre_head), .full(pre_full), .empty(pre_empty), .count(pre_count));

  logic [N_ARB-1:0][$clog2(IN_DEPTH):0] in_count;
  logic [N_ARB-1:0]                     in_push;
  logic [3:0]                           dsel;
  assign dsel    = pre_head.hc[HC_W-1 -: 4];
  assign pre_pop = !pre_empty && (in_count[dsel] < ($clog2(IN_DEPTH)+1)'(IN_DEPTH));
  always_comb begin
    in_push = '0;
    if (pre_pop) in_push[dsel] = 1'b1;
    arb_almost_full = 1'b0;
    for (int a = 0; a < N_ARB; a++)
      if (in_count[a] >= ($clog2(IN_DEPTH)+1)'(IN_DEPTH - 4)) arb_almost_full = 1'b1;
  end

  // ------------------------------------------------------------ arbiters and read-out mux
  logic [N_ARB-1:0][N_TYPE-1:0][3:0] a_ro_w;
  logic [N_ARB-1:0][DA_W-1:0]        a_ro_addr;
  logic [N_ARB-1:0]                  a_ro_asg;
  for (genvar a = 0; a < N_ARB; a++) begin : g_arb
    arbiter #(.N_BANK(N_BANK), .BANK_DEPTH(BANK_DEPTH), .IN_DEPTH(IN_DEPTH)) u_arb (
      .clk(clk), .rst_n(rst_n), .arb_id(4'(a)), .n_entry(n_entry),
      .in_push(in_push[a]), .in_grp(pre_head), .in_count(in_count[a]),
      .ro_req(ro_req && ro_idx[3:0] == 4'(a)), .ro_idx(ro_idx[EW+6:4]),
      .ro_w(a_ro_w[a]), .ro_addr(a_ro_addr[a]), .ro_assigned(a_ro_asg[a]),
      .act_valid(act_valid && act_idx[3:0] == 4'(a)), .act_idx(act_idx[EW+6:4]), .act_active(act_active),
      .st_bypass(st_bypass[a]), .st_assign(st_assign[a]), .st_drop(st_drop[a]));
  end

  logic [3:0] ro_sel;
  always_ff @(posedge clk) ro_sel <= ro_idx[3:0];
  assign ro_w        = a_ro_w[ro_sel];
  assign ro_addr     = a_ro_addr[ro_sel];
  assign ro_assigned = a_ro_asg[ro_sel];
endmodule
