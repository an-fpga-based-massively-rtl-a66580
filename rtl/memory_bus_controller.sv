// memory_bus_controller: shares the off-chip memories between the
// minicolumn array (neural states) and the axon array (delayed events).
//
// Neural states (800 bits per TM minicolumn) are split into 512 bits kept in
// DDR and 288 bits kept in the four QDR memories (4 x 72 bits, one common
// address). TM minicolumns are processed in segments of SEG_LEN = 1024.
// Segment s lives in DDR[s mod 2] at word (s/2)*1024 and in QDR at s*1024,
// so while the minicolumn array computes segment k and its results are
// written to DDR[k mod 2], the states of segment k+1 are read in advance from
// the other DDR (read-in-advance; the number of segments must be even).
// Sequence (state machine):
//   PREFETCH  read segment 0
//   BURST     the minicolumn array runs one segment from DDR RD_FIFO / QDR
//             RD_FIFO while segment k+1 is read and results drain through
//             DDR WR_FIFO / QDR WR_FIFO
//   DRAIN     wait until all results of segment k are written
//   SLOT      the axon array owns both DDRs for up to slot_cycles clocks (it
//             may release earlier when it has nothing to do); while TX_FIFO
//             is over 95 % full the slot is extended, so the minicolumn array
//             stays paused
//   PAUSE     entered from BURST when TX_FIFO passes 95 %: the minicolumn
//             array stops issuing and the axon array gets the bus until the
//             usage falls below 95 %
// The QDR memories run in their own clock: QDR WR_FIFO carries result words
// and "read segment" commands to the QDR side, which reads the 1024 words of
// that segment into QDR RD_FIFO. Bus ownership changes only when no DDR
// read is outstanding. Slot length and the 95 % threshold follow the paper;
// the DRAIN step, the PAUSE handling inside a burst and the QDR command
// encoding are this design's choices.
module memory_bus_controller
  import cortex_pkg::*;
#(
  parameter int RD_DEPTH = 2048,
  parameter int WR_DEPTH = 1024,
  parameter int TX_DEPTH = 2048
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  qdr_clk,
  input  logic                  qdr_rst_n,
  // configuration
  input  logic                  run,
  input  logic [10:0]           nseg,
  input  logic [15:0]           slot_cycles,
  // minicolumn array
  output logic                  mc_run,
  input  logic                  mc_issue,
  input  logic                  mc_seg_last,
  output logic                  st_valid,
  output logic [STATE_W-1:0]    st_rd,
  input  logic                  st_pop,
  input  logic                  st_wr_valid,
  input  logic [STATE_W-1:0]    st_wr,
  // axon array
  output logic                  ax_grant,
  output logic                  ax_stop,
  input  logic                  ax_busy,
  input  logic                  ax_quiet,
  input  logic [$clog2(TX_DEPTH):0] tx_count,
  input  logic [1:0]            ax_req_valid,
  input  ddr_req_t [1:0]        ax_req,
  output logic [1:0]            ax_req_ready,
  output logic [1:0]            ax_rd_valid,
  output logic [1:0][DDR_W-1:0] ax_rd_data,
  // DDR_A, DDR_B
  output logic [1:0]            ddr_req_valid,
  output ddr_req_t [1:0]        ddr_req,
  input  logic [1:0]            ddr_req_ready,
  input  logic [1:0]            ddr_rd_valid,
  input  logic [1:0][DDR_W-1:0] ddr_rd_data,
  // QDR_A..D (qdr_clk domain)
  output logic                  qdr_wr_en,
  output logic [QDR_ADDR_W-1:0] qdr_wr_addr,
  output logic [N_QDR-1:0][QDR_W-1:0] qdr_wr_data,
  output logic                  qdr_rd_en,
  output logic [QDR_ADDR_W-1:0] qdr_rd_addr,
  input  logic                  qdr_rd_valid,
  input  logic [N_QDR-1:0][QDR_W-1:0] qdr_rd_data,
  // status
  output logic                  cycle_done,   // pulse: one update of all TM minicolumns finished
  output logic                  paused        // minicolumn array paused by TX_FIFO usage
);
  localparam int QW  = N_QDR * QDR_W;                 // 288
  localparam int RDA = $clog2(RD_DEPTH);
  typedef enum logic [2:0] {M_IDLE, M_PREFETCH, M_BURST, M_DRAIN, M_SLOT, M_PAUSE} m_e;
  typedef struct packed {
    logic                  rdseg;   // 1: read segment `addr[19:10]`; 0: write word
    logic [QDR_ADDR_W-1:0] addr;
    logic [QW-1:0]         data;
  } qcmd_t;

  m_e          st;
  qcmd_t       q_head;
  logic        q_empty, q_pop, qrd_full, qcmd_pend;
  logic [RDA:0] qrd_count;
  logic [10:0] wr_seq;               // results pushed into QDR WR_FIFO in this segment
  logic [10:0] seg, rseg, wseg, qseg; // computing / reading / DDR-writing / QDR-writing segment
  logic [10:0] rd_n, wr_n;           // words read / written in the current segment
  logic [15:0] slot_n;
  logic [1:0][RDA:0] outst;          // DDR reads in flight
  logic        tx_over;
  assign tx_over = 32'(tx_count) * 100 > 32'(TX_DEPTH) * 95;

  // ---------------------------------------------------------------- DDR RD_FIFO / WR_FIFO
  logic [DDR_W-1:0] drf_q, dwf_q;
  logic             drf_empty, drf_full, dwf_empty, dwf_full, dwf_pop, drf_push;
  logic [RDA:0]     drf_count;
  logic [$clog2(WR_DEPTH):0] dwf_count;
  sync_fifo #(.W(DDR_W), .DEPTH(RD_DEPTH)) u_ddr_rd (
    .clk(clk), .rst_n(rst_n), .push(drf_push), .wr_data(ddr_rd_data[rseg[0]]), .pop(st_pop),
    .rd_data(drf_q), .full(drf_full), .empty(drf_empty), .count(drf_count));
  sync_fifo #(.W(DDR_W), .DEPTH(WR_DEPTH)) u_ddr_wr (
    .clk(clk), .rst_n(rst_n), .push(st_wr_valid), .wr_data(st_wr[DDR_W-1:0]), .pop(dwf_pop),
    .rd_data(dwf_q), .full(dwf_full), .empty(dwf_empty), .count(dwf_count));

  wire mc_owns = (st == M_PREFETCH) || (st == M_BURST) || (st == M_DRAIN);
  wire rd_more = (rd_n != 11'(SEG_LEN)) && (st == M_PREFETCH || st == M_BURST);
  wire rd_room = (32'(drf_count) + 32'(outst[rseg[0]]) + 32'd2) < 32'(RD_DEPTH);
  wire rd_go   = rd_more && rd_room && ddr_req_ready[rseg[0]] && !(st == M_BURST && tx_over);
  assign dwf_pop  = mc_owns && !dwf_empty && ddr_req_ready[wseg[0]] && !(rd_go && rseg[0] == wseg[0]);
  assign drf_push = ddr_rd_valid[rseg[0]] && mc_owns;

  always_comb begin
    ddr_req_valid = '0;
    ddr_req       = '0;
    ax_req_ready  = '0;
    ax_rd_valid   = '0;
    ax_rd_data    = ddr_rd_data;
    if (mc_owns) begin
      if (rd_go) begin
        ddr_req_valid[rseg[0]]    = 1'b1;
        ddr_req[rseg[0]].we       = 1'b0;
        ddr_req[rseg[0]].addr     = DDR_ADDR_W'({rseg[10:1], rd_n[9:0]});
      end
      if (dwf_pop) begin
        ddr_req_valid[wseg[0]]    = 1'b1;
        ddr_req[wseg[0]].we       = 1'b1;
        ddr_req[wseg[0]].addr     = DDR_ADDR_W'({wseg[10:1], wr_n[9:0]});
        ddr_req[wseg[0]].wdata    = dwf_q;
      end
    end else if (ax_grant) begin
      ddr_req_valid = ax_req_valid;
      ddr_req       = ax_req;
      ax_req_ready  = ddr_req_ready;
      ax_rd_valid   = ddr_rd_valid;
    end
  end

  // ---------------------------------------------------------------- QDR path (core side)
  qcmd_t qw_in;
  logic  qw_push, qw_full, qr_empty, qr_pop, qw_rdcmd;
  logic [QW-1:0] qr_q;
  logic [11:0] qw_count;
  assign qw_rdcmd = rd_go && rd_n == 11'd0;         // one command per segment read
  assign qw_push  = st_wr_valid || qcmd_pend;
  always_comb begin
    if (st_wr_valid) qw_in = qcmd_t'{rdseg: 1'b0, addr: QDR_ADDR_W'({qseg[9:0], wr_seq[9:0]}), data: st_wr[STATE_W-1:DDR_W]};
    else             qw_in = qcmd_t'{rdseg: 1'b1, addr: QDR_ADDR_W'({rseg[9:0], 10'd0}), data: '0};
  end
  // a read command waits in qcmd_pend while result words are being pushed
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                         qcmd_pend <= 1'b0;
    else if (qw_rdcmd)                  qcmd_pend <= 1'b1;
    else if (qcmd_pend && !st_wr_valid) qcmd_pend <= 1'b0;
  end
  async_fifo #(.W($bits(qcmd_t)), .DEPTH(2048)) u_qdr_wr (
    .wclk(clk), .wrst_n(rst_n), .push(qw_push), .wr_data(qw_in), .full(qw_full), .wcount(qw_count),
    .rclk(qdr_clk), .rrst_n(qdr_rst_n), .pop(q_pop), .rd_data(q_head), .empty(q_empty));
  async_fifo #(.W(QW), .DEPTH(RD_DEPTH)) u_qdr_rd (
    .wclk(qdr_clk), .wrst_n(qdr_rst_n), .push(qdr_rd_valid), .wr_data(qdr_rd_data), .full(qrd_full), .wcount(qrd_count),
    .rclk(clk), .rrst_n(rst_n), .pop(qr_pop), .rd_data(qr_q), .empty(qr_empty));

  assign qr_pop   = st_pop;
  assign st_valid = !drf_empty && !qr_empty;
  assign st_rd    = {qr_q, drf_q};

  // ---------------------------------------------------------------- QDR side (qdr_clk)
  logic [QDR_ADDR_W-1:0] q_rd_ptr;
  logic [10:0] q_rd_left;
  logic [3:0]  q_infl;       // reads in flight on the QDR read port
  assign q_pop = !q_empty && (!q_head.rdseg || q_rd_left == '0);
  assign qdr_wr_en   = q_pop && !q_head.rdseg;
  assign qdr_wr_addr = q_head.addr;
  assign qdr_wr_data = q_head.data;
  assign qdr_rd_en   = (q_rd_left != '0) && (32'(qrd_count) + 32'(q_infl) + 32'd4 < 32'(RD_DEPTH));
  assign qdr_rd_addr = q_rd_ptr;
  always_ff @(posedge qdr_clk or negedge qdr_rst_n) begin
    if (!qdr_rst_n) begin
      q_rd_ptr <= '0; q_rd_left <= '0; q_infl <= '0;
    end else begin
      q_infl <= q_infl + 4'(qdr_rd_en) - 4'(qdr_rd_valid);
      if (q_pop && q_head.rdseg) begin
        q_rd_ptr  <= q_head.addr;
        q_rd_left <= 11'(SEG_LEN);
      end else if (qdr_rd_en) begin
        q_rd_ptr  <= q_rd_ptr + 1'b1;
        q_rd_left <= q_rd_left - 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- state machine
  logic [10:0] issued;
  assign mc_run   = (st == M_BURST) && !tx_over && issued != 11'(SEG_LEN);
  assign ax_grant = (st == M_SLOT) || (st == M_PAUSE && outst == '0);
  assign paused   = (st == M_PAUSE);

  wire [10:0] nxt_seg = (seg + 1'b1 == nseg) ? 11'd0 : seg + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; seg <= '0; rseg <= '0; wseg <= '0; qseg <= '0; rd_n <= '0; wr_n <= '0; wr_seq <= '0;
      slot_n <= '0; outst <= '0; issued <= '0; ax_stop <= 1'b0; cycle_done <= 1'b0;
    end else begin
      cycle_done <= 1'b0;
      for (int d = 0; d < 2; d++)
        outst[d] <= outst[d] + (RDA+1)'(ddr_req_valid[d] && ddr_req_ready[d] && !ddr_req[d].we && mc_owns)
                             - (RDA+1)'(ddr_rd_valid[d] && mc_owns);
      if (rd_go) rd_n <= rd_n + 1'b1;
      if (dwf_pop) begin
        if (wr_n == 11'(SEG_LEN - 1)) begin
          wr_n <= '0;
          wseg <= (wseg + 1'b1 == nseg) ? 11'd0 : wseg + 1'b1;
        end else wr_n <= wr_n + 1'b1;
      end
      if (st_wr_valid) begin
        if (wr_seq == 11'(SEG_LEN - 1)) begin
          wr_seq <= '0;
          qseg   <= (qseg + 1'b1 == nseg) ? 11'd0 : qseg + 1'b1;
        end else wr_seq <= wr_seq + 1'b1;
      end
      if (mc_issue) issued <= issued + 1'b1;
      case (st)
        M_IDLE: if (run) begin
          st <= M_PREFETCH; seg <= '0; rseg <= '0; wseg <= '0; qseg <= '0; rd_n <= '0; wr_n <= '0; wr_seq <= '0;
        end
        M_PREFETCH: if (rd_n == 11'(SEG_LEN)) begin
          st <= M_BURST; rseg <= nxt_seg; rd_n <= '0; issued <= '0;
        end
        M_BURST: begin
          if (tx_over) begin
            if (outst == '0) st <= M_PAUSE;
          end else if (issued == 11'(SEG_LEN) && rd_n == 11'(SEG_LEN)) st <= M_DRAIN;
        end
        M_DRAIN: if (wseg != seg && outst == '0) begin
          st <= M_SLOT; slot_n <= '0; ax_stop <= 1'b0;
        end
        M_SLOT: begin
          slot_n <= slot_n + 1'b1;
          if ((slot_n >= slot_cycles || !ax_busy) && !tx_over) ax_stop <= 1'b1;
          if (ax_stop && ax_quiet) begin
            ax_stop <= 1'b0;
            if (nxt_seg == '0) cycle_done <= 1'b1;
            if (nxt_seg == '0 && !run) st <= M_IDLE;
            else begin
              st <= M_BURST; seg <= nxt_seg; rseg <= (nxt_seg + 1'b1 == nseg) ? 11'd0 : nxt_seg + 1'b1;
              rd_n <= '0; issued <= '0;
            end
          end
        end
        M_PAUSE: begin
          if (!tx_over) ax_stop <= 1'b1;
          if (ax_stop && ax_quiet) begin
            ax_stop <= 1'b0; st <= M_BURST;
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  a_no_result_loss: assert property (@(posedge clk) disable iff (!rst_n) !(qw_push && qw_full));
  a_no_state_loss:  assert property (@(posedge clk) disable iff (!rst_n) !(st_wr_valid && dwf_full));
endmodule
