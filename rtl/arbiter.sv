// arbiter: dynamic assignment of DA minicolumns to TM minicolumns.
//
// Each of the 16 arbiters serves 64k TM minicolumns. It keeps, in a fast CAM,
// which DA minicolumns currently own TM minicolumns: one CAM entry (key = the
// DA address without its arbiter bits and its 3 LSBs) covers 8 TM
// minicolumns, and the synaptic weight buffer address is {entry, addr[2:0]}.
// The state machine takes destination groups from IN_FIFO and walks their
// minicolumns (base + j mod hc_size). For each destination it
//   - bypasses the CAM when the key equals that of the previous destination
//     (destinations of one hypercolumn arrive in sequence),
//   - otherwise searches the CAM (at most 64 row reads),
//   - on a hit adds the 8 signed 4-bit weights, with saturation, to the
//     weight word (read-modify-write through port B of the buffer),
//   - on a miss takes the next free entry from the index generator (a
//     counter that wraps after n_entry entries and skips assigned ones),
//     writes the weights to the new word and zeros to the other 7, then
//     stores the key and marks the entry assigned.
// Read-out (port A, by the minicolumn array): ro_req with a local TM index
// returns, one clock later, the weight word (which is cleared), the full DA
// address and whether the entry is assigned. A same-clock write from the
// state machine is forwarded, and the state machine never reads a word that
// is being read out in that clock, so no weight is lost or counted twice.
// An entry is released when the activity reports of all its 8 TM
// minicolumns say idle and no weight reached it since its first read-out.
// The release rule, the skip of assigned entries, the word initialisation
// and the drop of an event when all entries are assigned are this design's
// choices; CAM, bypass, index generator and buffer sizes follow the paper.
module arbiter
  import cortex_pkg::*;
#(
  parameter int N_BANK     = 128,
  parameter int BANK_DEPTH = 64,
  parameter int IN_DEPTH   = 16,
  localparam int EW        = $clog2(N_BANK * BANK_DEPTH),   // entry index (13)
  localparam int LW        = EW + 3                          // TM index (16)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [3:0]             arb_id,
  input  logic [EW:0]            n_entry,
  // IN_FIFO
  input  logic                   in_push,
  input  dst_grp_t               in_grp,
  output logic [$clog2(IN_DEPTH):0] in_count,
  // read-out by the minicolumn array
  input  logic                   ro_req,
  input  logic [LW-1:0]          ro_idx,
  output logic [N_TYPE-1:0][3:0] ro_w,
  output logic [DA_W-1:0]        ro_addr,
  output logic                   ro_assigned,
  // activity report
  input  logic                   act_valid,
  input  logic [LW-1:0]          act_idx,
  input  logic                   act_active,
  // statistics
  output logic                   st_bypass,
  output logic                   st_assign,
  output logic                   st_drop
);
  localparam int NE = N_BANK * BANK_DEPTH;

  // ---------------------------------------------------------------- IN_FIFO
  logic     in_empty, in_pop, in_full;
  dst_grp_t head, g;
  sync_fifo #(.W($bits(dst_grp_t)), .DEPTH(IN_DEPTH)) u_in (
    .clk(clk), .rst_n(rst_n), .push(in_push), .wr_data(in_grp), .pop(in_pop),
    .rd_data(head), .full(in_full), .empty(in_empty), .count(in_count));

  // ---------------------------------------------------------------- fast CAM
  logic          c_search, c_busy, c_done, c_hit, c_wr, c_clr, c_rd;
  logic [EW-1:0] c_hit_idx, c_wr_idx, c_clr_idx;
  logic [19:0]   c_key, c_wr_key, c_rd_key;
  logic [NE-1:0] c_valid;
  fast_cam #(.KEY_W(20), .N_BANK(N_BANK), .BANK_DEPTH(BANK_DEPTH)) u_cam (
    .clk(clk), .rst_n(rst_n), .search(c_search), .key(c_key), .search_busy(c_busy),
    .done(c_done), .hit(c_hit), .hit_idx(c_hit_idx),
    .wr(c_wr), .wr_idx(c_wr_idx), .wr_key(c_wr_key),
    .clr(c_clr), .clr_idx(c_clr_idx),
    .rd(c_rd), .rd_idx(ro_idx[LW-1:3]), .rd_key(c_rd_key), .valid(c_valid));

  // ---------------------------------------------------------------- weight buffer
  logic [31:0] wbuf [NE*8];
  logic          b_we;
  logic [LW-1:0] b_addr;
  logic [31:0]   b_wdata, b_q;

  // ---------------------------------------------------------------- state machine
  typedef enum logic [2:0] {S_IDLE, S_NEXT, S_WAIT, S_FREE, S_INIT, S_ACC_RD, S_ACC_WR, S_STEP} st_e;
  st_e           st;
  logic [5:0]    j;
  logic [EW-1:0] idx, ig, prev_idx;
  logic [19:0]   key, prev_key;
  logic          prev_v;
  logic [2:0]    lsb, ini;
  logic [EW:0]   tries;
  logic [NE-1:0] touched, anyact;

  // destination of step j
  logic [7:0] mc_sum, mc;
  always_comb begin
    mc_sum = 8'(g.base) + 8'(j);
    mc     = (mc_sum >= g.hc_size) ? mc_sum - g.hc_size : mc_sum;
  end

  // read-out conflict: port A reads TM word ro_idx this clock
  wire ro_hits_fsm = ro_req && (ro_idx == {idx, lsb});

  assign in_pop = (st == S_IDLE) && !in_empty;

  function automatic logic [31:0] wadd(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] r;
    for (int t = 0; t < N_TYPE; t++)
      r[4*t +: 4] = sat4(16'(signed'(a[4*t +: 4])) + 16'(signed'(b[4*t +: 4])));
    return r;
  endfunction

  always_comb begin
    c_search = 1'b0; c_key = key;
    c_wr = 1'b0; c_wr_idx = idx; c_wr_key = key;
    b_we = 1'b0; b_addr = {idx, lsb}; b_wdata = '0;
    case (st)
      S_WAIT:   c_search = !c_busy && !c_done;
      S_INIT: begin
        b_we    = 1'b1;
        b_addr  = {idx, ini};
        b_wdata = (ini == lsb) ? g.w : '0;
        if (ini == 3'd7) c_wr = 1'b1;
      end
      S_ACC_WR: begin
        b_we    = 1'b1;
        b_wdata = wadd(b_q, g.w);
      end
      default: ;
    endcase
  end

  logic srch_started;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; j <= '0; idx <= '0; ig <= '0; prev_idx <= '0; prev_key <= '0; prev_v <= 1'b0;
      key <= '0; lsb <= '0; ini <= '0; tries <= '0; touched <= '0; g <= '0; srch_started <= 1'b0;
      st_bypass <= 1'b0; st_assign <= 1'b0; st_drop <= 1'b0;
    end else begin
      st_bypass <= 1'b0; st_assign <= 1'b0; st_drop <= 1'b0;
      case (st)
        S_IDLE: if (!in_empty) begin
          g <= head; j <= '0; st <= S_NEXT;
        end
        S_NEXT: begin
          key <= {g.hc[15:0], mc[6:3]};
          lsb <= mc[2:0];
          if (prev_v && prev_key == {g.hc[15:0], mc[6:3]}) begin
            idx <= prev_idx; st <= S_ACC_RD; st_bypass <= 1'b1;
          end else begin
            st <= S_WAIT; srch_started <= 1'b0;
          end
        end
        S_WAIT: begin
          if (c_search) srch_started <= 1'b1;
          if (c_done && srch_started) begin
            if (c_hit) begin
              idx <= c_hit_idx; prev_idx <= c_hit_idx; prev_key <= key; prev_v <= 1'b1;
              st <= S_ACC_RD;
            end else begin
              st <= S_FREE; tries <= '0;
            end
          end
        end
        S_FREE: begin
          if (tries == n_entry) begin
            st_drop <= 1'b1; st <= S_STEP;
          end else if (!c_valid[ig]) begin
            idx <= ig; ini <= '0; st <= S_INIT;
          end
          if (tries != n_entry) begin
            tries <= tries + 1'b1;
            ig <= ((EW+1)'(ig) == n_entry - 1'b1) ? '0 : ig + 1'b1;
          end
        end
        S_INIT: begin
          ini <= ini + 1'b1;
          if (ini == 3'd7) begin
            prev_idx <= idx; prev_key <= key; prev_v <= 1'b1;
            touched[idx] <= 1'b1; st_assign <= 1'b1; st <= S_STEP;
          end
        end
        S_ACC_RD: if (!ro_hits_fsm) st <= S_ACC_WR;
        S_ACC_WR: begin
          touched[idx] <= 1'b1; st <= S_STEP;
        end
        S_STEP: begin
          j  <= j + 1'b1;
          st <= (6'(j + 1'b1) == g.count) ? S_IDLE : S_NEXT;
        end
        default: st <= S_IDLE;
      endcase
      // the first read-out of an entry opens a new observation window
      if (ro_req && ro_idx[2:0] == 3'd0) touched[ro_idx[LW-1:3]] <= 1'b0;
      if (c_clr && prev_idx == c_clr_idx) prev_v <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- buffer ports
  logic          ro_d, ro_clr_pend, fwd;
  logic [LW-1:0] ro_idx_d;
  logic [31:0]   qa, fwd_data;
  always_ff @(posedge clk) begin
    // port A: read-out, then clear one clock later unless the state machine writes that word
    if (ro_clr_pend && !(b_we && b_addr == ro_idx_d)) wbuf[ro_idx_d] <= '0;
    if (ro_req) qa <= wbuf[ro_idx];
    // port B: state machine
    if (b_we) wbuf[b_addr] <= b_wdata;
    b_q <= wbuf[b_addr];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ro_d <= 1'b0; ro_clr_pend <= 1'b0; ro_idx_d <= '0; fwd <= 1'b0; fwd_data <= '0;
      ro_assigned <= 1'b0;
    end else begin
      ro_d        <= ro_req;
      ro_clr_pend <= ro_req;
      ro_idx_d    <= ro_idx;
      fwd         <= ro_req && b_we && b_addr == ro_idx;
      fwd_data    <= b_wdata;
      ro_assigned <= ro_req && c_valid[ro_idx[LW-1:3]];
    end
  end
  assign c_rd    = ro_req;
  assign ro_w    = (ro_d && ro_assigned) ? (fwd ? fwd_data : qa) : '0;

  // the key is read with every read-out, so that it always matches ro_assigned
  // even when the entry is assigned or freed between two slots of one entry
  assign ro_addr = {arb_id, c_rd_key, ro_idx_d[2:0]};

  // ---------------------------------------------------------------- release
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) anyact <= '0;
    else if (act_valid) begin
      if (act_idx[2:0] == 3'd0) anyact[act_idx[LW-1:3]] <= act_active;
      else if (act_active)     anyact[act_idx[LW-1:3]] <= 1'b1;
    end
  end
  assign c_clr     = act_valid && act_idx[2:0] == 3'd7 && !act_active && !anyact[act_idx[LW-1:3]]
                   && !touched[act_idx[LW-1:3]] && c_valid[act_idx[LW-1:3]]
                   && !(st == S_INIT && idx == act_idx[LW-1:3]);
  assign c_clr_idx = act_idx[LW-1:3];
endmodule
