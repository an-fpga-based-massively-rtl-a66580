// cortex_top: one board of the neuromorphic cortex simulator.
//
// Wires the four parts of the paper's Fig. 1 around the memory bus
// controller (the Master) and the external interface:
//   minicolumn_array  - updates the TM minicolumns one per clock
//                       (100 physical neurons in an 11-stage pipeline) and
//                       turns their spikes into post-synaptic events
//   axon_array        - events -> axonal delays -> DDR regions -> events
//   synapse_array     - events -> pre-synaptic connections -> 16 arbiters
//                       that accumulate weights of DA minicolumns
//   parameter_lut     - neuron parameters and connection patterns
// The Master schedules each TM cycle: 1k-minicolumn bursts of neural states
// from DDR and QDR, then a 200-clock axon slot; the minicolumn array pauses
// while TX_FIFO is over 95% full; the synapse array stops when an arbiter
// input FIFO is almost full.
// Interface: host instructions in (cortex_pkg::host_cmd_t), monitored spikes
// and remote events out, two DDR3 ports (512-bit words, one request per
// clock with ready, read data with valid) and one QDR-II port on its own
// clock (write: en/addr/data; read: en/addr then valid/data). The serial
// links, the memory devices and the host software are outside this module.
module cortex_top
  import cortex_pkg::*;
#(
  parameter int TX_DEPTH   = 2048,
  parameter int N_BANK     = 128,
  parameter int BANK_DEPTH = 64,
  localparam int EW        = $clog2(N_BANK * BANK_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  qdr_clk,
  input  logic                  qdr_rst_n,
  // host
  input  logic                  cmd_valid,
  input  host_cmd_t             cmd,
  output logic                  cmd_ready,
  output logic                  spk_out_valid,
  output logic [DA_W+N_NEURON-1:0] spk_out,
  input  logic                  spk_out_ready,
  output logic                  rem_out_valid,
  output post_ev_t              rem_out,
  input  logic                  rem_out_ready,
  // DDR3 (two modules)
  output logic [1:0]            ddr_req_valid,
  output ddr_req_t [1:0]        ddr_req,
  input  logic [1:0]            ddr_req_ready,
  input  logic [1:0]            ddr_rd_valid,
  input  logic [1:0][DDR_W-1:0] ddr_rd_data,
  // QDR-II (four devices in parallel, qdr_clk domain)
  output logic                  qdr_wr_en,
  output logic [QDR_ADDR_W-1:0] qdr_wr_addr,
  output logic [N_QDR-1:0][QDR_W-1:0] qdr_wr_data,
  output logic                  qdr_rd_en,
  output logic [QDR_ADDR_W-1:0] qdr_rd_addr,
  input  logic                  qdr_rd_valid,
  input  logic [N_QDR-1:0][QDR_W-1:0] qdr_rd_data,
  // status
  output logic                  cycle_done,
  output logic                  paused,
  output logic [N_ARB-1:0]      st_bypass,
  output logic [N_ARB-1:0]      st_assign,
  output logic [N_ARB-1:0]      st_drop,
  output logic                  syn_stall,
  output logic [15:0]           dropped
);
  localparam int LUT_LAT = 5;

  // configuration
  logic lut_wr; lut_table_e lut_sel; logic [15:0] lut_waddr; logic [511:0] lut_wdata;
  logic run; logic [10:0] nseg; logic [15:0] slot_cycles; logic [9:0] f;
  logic [EW:0] n_entry; logic [16:0][19:0] thr;

  // minicolumn array <-> others
  logic mc_run, issue, seg_last;
  logic st_valid, st_pop, st_wr_valid;
  logic [STATE_W-1:0] st_rd, st_wr;
  logic ro_req, ro_assigned, act_valid, act_active;
  logic [TM_BITS-1:0] ro_idx, act_idx;
  logic [N_TYPE-1:0][3:0] ro_w;
  logic [DA_W-1:0] ro_addr, mc_lut_addr, spk_addr;
  col_prm_t mc_col; post_prm_t mc_post;
  logic mc_ev_valid, spk_valid; post_ev_t mc_ev; logic [N_NEURON-1:0] spk;

  // axon array
  logic ext_ev_valid, ext_ev_ready, remote_valid, ax_grant, ax_stop, ax_busy, ax_quiet;
  post_ev_t ext_ev, remote_ev;
  logic [$clog2(TX_DEPTH):0] tx_count;
  logic [1:0] ax_req_valid, ax_req_ready, ax_rd_valid;
  ddr_req_t [1:0] ax_req;
  logic [1:0][DDR_W-1:0] ax_rd_data;
  logic rx_valid, rx_pop; pre_ev_t rx_ev;

  // synapse array
  logic [DA_W-1:0] syn_lut_addr; logic [3:0] syn_conn;
  pre_prm_t syn_pre; ncon_t syn_ncon;
  logic arb_almost_full;

  external_interface #(.EW(EW)) u_ext (
    .clk, .rst_n, .cmd_valid, .cmd, .cmd_ready,
    .lut_wr, .lut_sel, .lut_addr(lut_waddr), .lut_data(lut_wdata),
    .run, .nseg, .slot_cycles, .f, .n_entry, .thr,
    .ext_ev_valid, .ext_ev, .ext_ev_ready,
    .spk_valid, .spk_addr, .spk, .rem_valid(remote_valid), .rem_ev(remote_ev),
    .spk_out_valid, .spk_out, .spk_out_ready, .rem_out_valid, .rem_out, .rem_out_ready,
    .dropped);

  minicolumn_array #(.LUT_LAT(LUT_LAT)) u_mc (
    .clk, .rst_n, .run(mc_run), .num_tm({nseg, 10'd0}), .issue, .seg_last,
    .st_valid, .st_rd, .st_pop, .st_wr_valid, .st_wr,
    .ro_req, .ro_idx, .ro_w, .ro_addr, .ro_assigned,
    .act_valid, .act_idx, .act_active,
    .lut_addr(mc_lut_addr), .lut_col(mc_col), .lut_post(mc_post),
    .ev_valid(mc_ev_valid), .ev(mc_ev), .spk_valid, .spk_addr, .spk);

  axon_array #(.TX_DEPTH(TX_DEPTH)) u_axon (
    .clk, .rst_n, .mc_ev_valid, .mc_ev, .ext_ev_valid, .ext_ev, .ext_ev_ready,
    .remote_valid, .remote_ev, .tx_count, .thr, .f,
    .grant(ax_grant), .stop(ax_stop), .busy(ax_busy), .quiet(ax_quiet), .tx_done(),
    .ddr_req_valid(ax_req_valid), .ddr_req(ax_req), .ddr_req_ready(ax_req_ready),
    .ddr_rd_valid(ax_rd_valid), .ddr_rd_data(ax_rd_data),
    .rx_valid, .rx_ev, .rx_pop);

  assign syn_stall = arb_almost_full;
  synapse_array #(.LUT_LAT(LUT_LAT), .N_BANK(N_BANK), .BANK_DEPTH(BANK_DEPTH)) u_syn (
    .clk, .rst_n, .enable(!arb_almost_full), .n_entry,
    .rx_valid, .rx_ev, .rx_pop,
    .lut_addr(syn_lut_addr), .lut_conn(syn_conn), .lut_pre(syn_pre), .lut_ncon(syn_ncon),
    .ro_req, .ro_idx, .ro_w, .ro_addr, .ro_assigned,
    .act_valid, .act_idx, .act_active,
    .arb_almost_full, .st_bypass, .st_assign, .st_drop);

  parameter_lut u_lut (
    .clk, .rst_n, .wr(lut_wr), .wr_sel(lut_sel), .wr_addr(lut_waddr), .wr_data(lut_wdata),
    .mc_addr(mc_lut_addr), .mc_col, .mc_post,
    .syn_addr(syn_lut_addr), .syn_conn, .syn_pre, .syn_ncon);

  memory_bus_controller #(.TX_DEPTH(TX_DEPTH)) u_mbc (
    .clk, .rst_n, .qdr_clk, .qdr_rst_n, .run, .nseg, .slot_cycles,
    .mc_run, .mc_issue(issue), .mc_seg_last(seg_last),
    .st_valid, .st_rd, .st_pop, .st_wr_valid, .st_wr,
    .ax_grant, .ax_stop, .ax_busy, .ax_quiet, .tx_count,
    .ax_req_valid, .ax_req, .ax_req_ready, .ax_rd_valid, .ax_rd_data,
    .ddr_req_valid, .ddr_req, .ddr_req_ready, .ddr_rd_valid, .ddr_rd_data,
    .qdr_wr_en, .qdr_wr_addr, .qdr_wr_data, .qdr_rd_en, .qdr_rd_addr,
    .qdr_rd_valid, .qdr_rd_data, .cycle_done, .paused);
endmodule
