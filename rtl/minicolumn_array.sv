// minicolumn_array: the time-multiplexed minicolumns with their neuron-type
// manager and events generator.
//
// One TM minicolumn is issued per clock while the Master lets the array run
// and the state FIFO holds its neural state (800 bits: 100 neurons x {Vmem,
// PSC}). The pipeline, which never halts once a TM minicolumn is issued:
//   s0      global counter issues TM index i; its state is popped from the
//           memory FIFO; a read-out request goes to arbiter i[3:0]
//   s1      the arbiter returns the accumulated weights W (read and cleared),
//           the DA address assigned to i and whether one is assigned; the
//           DA address goes to the parameter LUT
//   s1+LAT  column parameters and post-connection entry arrive (LAT = 5)
//   +1      neuron-type manager maps types onto the 25 groups
//   +11     physical neurons (PSC generator and soma)
//   +3      events generator sums spikes per type
// The new states go to the memory WR FIFO as soon as the neurons finish;
// the activity of the TM minicolumn goes back to its arbiter (used to free
// idle assignments); an event {DA address, 8 spike counts, post-connection
// entry} goes to the axon array when any count is non-zero, and the spikes
// with the DA address go to the external interface for monitoring.
// A TM minicolumn with no DA minicolumn assigned keeps its neurons at rest.
// TM index i visits arbiter i[3:0], fast-CAM entry i[19:7], slot i[6:4]; this
// interleaving and the activity feedback are this design's choices.
module minicolumn_array
  import cortex_pkg::*;
#(
  parameter int LUT_LAT = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     run,          // Master grants a burst
  input  logic [TM_BITS:0]         num_tm,
  output logic                     issue,        // one TM minicolumn issued this clock
  output logic                     seg_last,     // ... and it ends a segment
  // neural states from / to memory
  input  logic                     st_valid,
  input  logic [STATE_W-1:0]       st_rd,
  output logic                     st_pop,
  output logic                     st_wr_valid,
  output logic [STATE_W-1:0]       st_wr,
  // weight read-out from the arbiters
  output logic                     ro_req,
  output logic [TM_BITS-1:0]       ro_idx,
  input  logic [N_TYPE-1:0][3:0]   ro_w,
  input  logic [DA_W-1:0]          ro_addr,
  input  logic                     ro_assigned,
  // activity report to the arbiters
  output logic                     act_valid,
  output logic [TM_BITS-1:0]       act_idx,
  output logic                     act_active,
  // parameter LUT
  output logic [DA_W-1:0]          lut_addr,
  input  col_prm_t                 lut_col,
  input  post_prm_t                lut_post,
  // events and spikes
  output logic                     ev_valid,
  output post_ev_t                 ev,
  output logic                     spk_valid,
  output logic [DA_W-1:0]          spk_addr,
  output logic [N_NEURON-1:0]      spk
);

  logic [TM_BITS-1:0] tm_idx;

  assign issue  = run && st_valid;
  assign st_pop = issue;
  assign ro_req = issue;
  assign ro_idx = tm_idx;

  // ---- s0 -> s1 registers
  logic               v1;
  logic [TM_BITS-1:0] i1;
  logic [STATE_W-1:0] st1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= issue;
  end
  always_ff @(posedge clk) begin
    i1 <= tm_idx; st1 <= st_rd;
  end
  assign lut_addr = ro_addr;

  // ---- s1 -> s1+LUT_LAT delay of everything that waits for the LUT
  typedef struct packed {
    logic [TM_BITS-1:0]      idx;
    logic [STATE_W-1:0]      st;
    logic [N_TYPE-1:0][3:0]  w;
    logic [DA_W-1:0]         addr;
    logic                    asg;
  } wait_t;
  wait_t wq [LUT_LAT];
  logic [LUT_LAT-1:0] wv;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wv <= '0;
    else        wv <= {wv[LUT_LAT-2:0], v1};
  end
  always_ff @(posedge clk) begin
    wq[0].idx <= i1; wq[0].st <= st1; wq[0].w <= ro_w; wq[0].addr <= ro_addr; wq[0].asg <= ro_assigned;
    for (int k = 1; k < LUT_LAT; k++) begin
      wq[k].idx <= wq[k-1].idx; wq[k].st <= wq[k-1].st; wq[k].w <= wq[k-1].w;
      wq[k].addr <= wq[k-1].addr; wq[k].asg <= wq[k-1].asg;
    end
  end
  wait_t at_ntm;
  assign at_ntm = wq[LUT_LAT-1];

  // ---- neuron-type manager (1 clock)
  logic [N_GROUP-1:0][2:0] tog;
  logic [N_GROUP-1:0]      gen;
  type_prm_t [N_NEURON-1:0] nprm;
  logic [N_NEURON-1:0][9:0] rnd;
  neuron_type_manager u_ntm (.clk(clk), .rst_n(rst_n), .col(lut_col),
    .type_of_group(tog), .group_en(gen), .prm(nprm), .rnd(rnd));

  // sideband travelling with the neurons
  typedef struct packed {
    logic [TM_BITS-1:0]      idx;
    logic [DA_W-1:0]         addr;
    logic                    asg;
    post_prm_t               post;
    logic [N_TYPE-1:0][3:0]  vinit;
  } side_t;
  side_t sn;   // at S_NEU
  logic  snv;
  logic [STATE_W-1:0]      st_n;
  logic [N_TYPE-1:0][3:0]  w_n;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) snv <= 1'b0;
    else        snv <= wv[LUT_LAT-1];
  end
  always_ff @(posedge clk) begin
    sn.idx <= at_ntm.idx; sn.addr <= at_ntm.addr; sn.asg <= at_ntm.asg; sn.post <= lut_post;
    for (int t = 0; t < N_TYPE; t++) sn.vinit[t] <= lut_col.prm[t].v_init;
    st_n <= at_ntm.st; w_n <= at_ntm.w;
  end

  // ---- physical minicolumn + global counter
  nstate_t [N_NEURON-1:0]   n_st_in, n_st_out;
  logic [N_NEURON-1:0][3:0] n_w;
  logic [N_NEURON-1:0]      n_en, n_spk;
  logic                     n_ov;
  always_comb begin
    for (int n = 0; n < N_NEURON; n++) begin
      n_st_in[n] = st_n[8*n +: 8];
      n_w[n]     = w_n[tog[n/4]];
      n_en[n]    = gen[n/4] && sn.asg;
    end
  end

  tm_minicolumns u_tm (
    .clk(clk), .rst_n(rst_n), .step(issue), .num_tm(num_tm), .tm_idx(tm_idx),
    .seg_last(seg_last), .cycle_last(),
    .in_valid(snv), .enable(n_en), .state_in(n_st_in), .w(n_w), .prm(nprm), .rnd(rnd),
    .out_valid(n_ov), .state_out(n_st_out), .spikes(n_spk));

  // sideband delayed by the 11 neuron stages
  side_t                   so [11];
  logic [N_GROUP-1:0][2:0] tog_d [11];
  logic [N_GROUP-1:0]      gen_d [11];
  always_ff @(posedge clk) begin
    so[0] <= sn; tog_d[0] <= tog; gen_d[0] <= gen;
    for (int k = 1; k < 11; k++) begin
      so[k] <= so[k-1]; tog_d[k] <= tog_d[k-1]; gen_d[k] <= gen_d[k-1];
    end
  end
  side_t s_out;
  assign s_out = so[10];

  // ---- write-back, activity, spikes
  always_comb begin
    st_wr_valid = n_ov;
    for (int n = 0; n < N_NEURON; n++) st_wr[8*n +: 8] = n_st_out[n];
    act_valid  = n_ov;
    act_idx    = s_out.idx;
    act_active = 1'b0;
    for (int n = 0; n < N_NEURON; n++)
      if (gen_d[10][n/4] && (n_spk[n] || n_st_out[n].psc != 4'd0 ||
                             n_st_out[n].v != s_out.vinit[tog_d[10][n/4]]))
        act_active = 1'b1;
    act_active = act_active && s_out.asg;
    spk_valid  = n_ov && s_out.asg && (n_spk != '0);
    spk_addr   = s_out.addr;
    spk        = n_spk;
  end

  // ---- events generator and event output
  logic                   eg_v;
  logic [N_TYPE-1:0][3:0] eg_cnt;
  events_generator u_eg (.clk(clk), .rst_n(rst_n), .in_valid(n_ov), .spikes(n_spk),
    .type_of_group(tog_d[10]), .group_en(gen_d[10]), .out_valid(eg_v), .counts(eg_cnt));

  side_t se [3];
  always_ff @(posedge clk) begin
    se[0] <= s_out; se[1] <= se[0]; se[2] <= se[1];
  end

  always_comb begin
    ev.src   = se[2].addr;
    ev.count = eg_cnt;
    ev.post  = se[2].post;
    ev_valid = eg_v && se[2].asg && (eg_cnt != '0);
  end
endmodule
