// parameter_lut: neuron parameters and connection patterns, on chip.
//
// A parallel CAM turns a DA minicolumn address into a range index (one
// index serves a whole range of minicolumns with the same parameters). Then,
// as in the paper:
//   minicolumn-array port: index -> parameter-type buffer -> column parameter
//     buffer (types, group counts and neuron parameters); index -> post-
//     connection buffer (hypercolumn connections, axonal delays, remote flag)
//   synapse-array port: index -> connection-address buffer; its value plus
//     the connection index k of the event addresses the pre-connection
//     buffer (size, hypercolumn offset, 8 weights, destination hypercolumn
//     size) and the neuron-connection buffer (8x8 type mask).
// Both ports have a fixed latency of LAT = 5 clocks (3 CAM + 2 buffer reads)
// and never stall. All tables are written by the external interface through
// one write port (sel names the table, see cortex_pkg::lut_table_e). Buffer
// depths are this design's choice; the paper gives only the CAM size.
module parameter_lut
  import cortex_pkg::*;
#(
  parameter int N_RANGE      = 512,
  parameter int COLPAR_DEPTH = 256,
  parameter int PRE_DEPTH    = 4096,
  localparam int RW          = $clog2(N_RANGE),
  localparam int CW          = $clog2(COLPAR_DEPTH),
  localparam int PW          = $clog2(PRE_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             wr,
  input  lut_table_e       wr_sel,
  input  logic [15:0]      wr_addr,
  input  logic [511:0]     wr_data,
  // minicolumn array
  input  logic [DA_W-1:0]  mc_addr,
  output col_prm_t         mc_col,
  output post_prm_t        mc_post,
  // synapse array
  input  logic [DA_W-1:0]  syn_addr,
  input  logic [3:0]       syn_conn,
  output pre_prm_t         syn_pre,
  output ncon_t            syn_ncon
);
  logic [1:0][RW-1:0] idx;
  parallel_cam #(.N(N_RANGE), .W(DA_W), .NQ(2)) u_pcam (
    .clk(clk), .rst_n(rst_n), .wr(wr && wr_sel == T_PCAM), .wr_idx(wr_addr[RW-1:0]),
    .wr_val(wr_data[DA_W-1:0]), .q_addr({syn_addr, mc_addr}), .q_idx(idx));

  logic [CW-1:0]  ptype  [N_RANGE];
  col_prm_t       colpar [COLPAR_DEPTH];
  post_prm_t      post   [N_RANGE];
  logic [PW-1:0]  caddr  [N_RANGE];
  pre_prm_t       pre    [PRE_DEPTH];
  ncon_t          ncon   [PRE_DEPTH];

  always_ff @(posedge clk) begin
    if (wr) begin
      case (wr_sel)
        T_PTYPE:  ptype[wr_addr[RW-1:0]]  <= wr_data[CW-1:0];
        T_COLPAR: colpar[wr_addr[CW-1:0]] <= wr_data[$bits(col_prm_t)-1:0];
        T_POST:   post[wr_addr[RW-1:0]]   <= wr_data[$bits(post_prm_t)-1:0];
        T_CADDR:  caddr[wr_addr[RW-1:0]]  <= wr_data[PW-1:0];
        T_PRE:    pre[wr_addr[PW-1:0]]    <= wr_data[$bits(pre_prm_t)-1:0];
        T_NCON:   ncon[wr_addr[PW-1:0]]   <= wr_data[$bits(ncon_t)-1:0];
        default: ;
      endcase
    end
  end

  // minicolumn port: stage 4 reads type and post entry, stage 5 the column parameters
  logic [CW-1:0] pt;
  post_prm_t     po;
  always_ff @(posedge clk) begin
    pt      <= ptype[idx[0]];
    po      <= post[idx[0]];
    mc_col  <= colpar[pt];
    mc_post <= po;
  end

  // synapse port: the connection index waits 3 clocks for the CAM
  logic [2:0][3:0] kd;
  logic [PW-1:0]   ca;
  logic [3:0]      k4;
  always_ff @(posedge clk) begin
    kd       <= {kd[1:0], syn_conn};
    ca       <= caddr[idx[1]];
    k4       <= kd[2];
    syn_pre  <= pre[PW'(ca + PW'(k4))];
    syn_ncon <= ncon[PW'(ca + PW'(k4))];
  end
endmodule
