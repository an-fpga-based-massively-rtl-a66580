// tb_cortex_top: end-to-end test of one board.
//
// Behavioural DDR3 (two ports, fixed read latency) and QDR-II (own clock)
// models surround the design. The host programs a small network through the
// instruction port: every DA minicolumn uses parameter range 0, type 0 for
// all 25 groups, two hypercolumn connections (recurrent with delay 1 and to
// hypercolumn +0x10001, i.e. the next arbiter, with delay 2), 128
// destinations of weight +7/8. Eight fast-CAM entries per arbiter (64 DA
// minicolumns) are enabled so that a full hypercolumn overflows an arbiter.
// One external event starts the activity; the test then runs 12 TM cycles
// of 2048 TM minicolumns.
// Checks: each TM cycle lasts at least 2048 + slot clocks (one minicolumn per
// clock plus the axon slot); every monitored spike has a minicolumn number
// a hypercolumn of the form g * 0x10001 (address mapper); DDR and QDR reads only touch written or state
// addresses; and every mechanism - external event, TM cycle, spike, remote
// event, axon DDR write and read, arbiter bypass, assignment and drop,
// synapse stall, minicolumn pause on TX_FIFO usage, QDR write and read - must
// have happened at least once. TX_FIFO is reduced to 512 entries so that the
// pause is reached with this small network; all other sizes are the paper's.
module tb_cortex_top;
  timeunit 1ns; timeprecision 1ps;
  import cortex_pkg::*;

  logic clk = 0, qdr_clk = 0, rst_n = 0, qdr_rst_n = 0;
  always #2.5 clk = ~clk;
  always #2 qdr_clk = ~qdr_clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic cmd_valid = 0, cmd_ready;
  host_cmd_t cmd;
  logic spk_out_valid, rem_out_valid;
  logic [DA_W+N_NEURON-1:0] spk_out;
  post_ev_t rem_out;
  logic [1:0] ddr_req_valid, ddr_req_ready, ddr_rd_valid;
  ddr_req_t [1:0] ddr_req;
  logic [1:0][DDR_W-1:0] ddr_rd_data;
  logic qdr_wr_en, qdr_rd_en, qdr_rd_valid;
  logic [QDR_ADDR_W-1:0] qdr_wr_addr, qdr_rd_addr;
  logic [N_QDR-1:0][QDR_W-1:0] qdr_wr_data, qdr_rd_data;
  logic cycle_done, paused, syn_stall;
  logic [N_ARB-1:0] st_bypass, st_assign, st_drop;
  logic [15:0] dropped;

  cortex_top #(.TX_DEPTH(512)) dut (
    .clk, .rst_n, .qdr_clk, .qdr_rst_n, .cmd_valid, .cmd, .cmd_ready,
    .spk_out_valid, .spk_out, .spk_out_ready(1'b1), .rem_out_valid, .rem_out, .rem_out_ready(1'b1),
    .ddr_req_valid, .ddr_req, .ddr_req_ready, .ddr_rd_valid, .ddr_rd_data,
    .qdr_wr_en, .qdr_wr_addr, .qdr_wr_data, .qdr_rd_en, .qdr_rd_addr, .qdr_rd_valid, .qdr_rd_data,
    .cycle_done, .paused, .st_bypass, .st_assign, .st_drop, .syn_stall, .dropped);

  // ---------------- DDR3 model: always ready, read data 8 clocks later, in order
  localparam int DDR_LAT = 8;
  logic [DDR_W-1:0] ddr_mem [2][logic [DDR_ADDR_W-1:0]];
  logic [DDR_LAT-1:0] rv [2];
  logic [DDR_W-1:0] rd [2][DDR_LAT];
  int n_ax_wr = 0, n_ax_rd = 0, n_bad_rd = 0;
  assign ddr_req_ready = 2'b11;
  for (genvar p = 0; p < 2; p++) begin : g_ddr
    assign ddr_rd_valid[p] = rv[p][DDR_LAT-1];
    assign ddr_rd_data[p]  = rd[p][DDR_LAT-1];
    always_ff @(posedge clk) begin
      if (!rst_n) rv[p] <= '0;
      else begin
        rv[p] <= {rv[p][DDR_LAT-2:0], ddr_req_valid[p] && !ddr_req[p].we};
        for (int k = DDR_LAT-1; k > 0; k--) rd[p][k] <= rd[p][k-1];
        rd[p][0] <= '0;
        if (ddr_req_valid[p]) begin
          if (ddr_req[p].we) ddr_mem[p][ddr_req[p].addr] = ddr_req[p].wdata;
          else if (ddr_mem[p].exists(ddr_req[p].addr)) rd[p][0] <= ddr_mem[p][ddr_req[p].addr];
          else if (ddr_req[p].addr >= 27'd524288) n_bad_rd++;   // event region read before write
          if (ddr_req[p].addr >= 27'd524288) begin
            if (ddr_req[p].we) n_ax_wr++; else n_ax_rd++;
          end
        end
      end
    end
  end

  // ---------------- QDR-II model: read data 3 qdr clocks later
  logic [N_QDR*QDR_W-1:0] qdr_mem [logic [QDR_ADDR_W-1:0]];
  logic [2:0] qv;
  logic [N_QDR*QDR_W-1:0] qd [3];
  int n_qwr = 0, n_qrd = 0;
  assign qdr_rd_valid = qv[2];
  assign qdr_rd_data  = qd[2];
  always_ff @(posedge qdr_clk) begin
    if (!qdr_rst_n) qv <= '0;
    else begin
      qv <= {qv[1:0], qdr_rd_en};
      qd[1] <= qd[0]; qd[2] <= qd[1];
      qd[0] <= qdr_mem.exists(qdr_rd_addr) ? qdr_mem[qdr_rd_addr] : '0;
      if (qdr_wr_en) begin qdr_mem[qdr_wr_addr] = qdr_wr_data; n_qwr++; end
      if (qdr_rd_en) n_qrd++;
    end
  end

  // ---------------- host instructions
  task automatic send(input opcode_e op, input logic [3:0] sel, input logic [15:0] addr,
                      input logic [511:0] data);
    @(negedge clk);
    cmd = '{op: op, sel: sel, addr: addr, data: data};
    cmd_valid = 1'b1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk) cmd_valid = 1'b0;
  endtask

  // ---------------- mechanism counters
  int n_cycle = 0, n_spk = 0, n_rem = 0, n_byp = 0, n_asg = 0, n_drop = 0, n_stall = 0, n_pause = 0;
  int n_short = 0, n_badmc = 0;
  longint last_done = -1, clk_cnt = 0;
  always_ff @(posedge clk) if (rst_n) begin
    clk_cnt <= clk_cnt + 1;
    if (cycle_done) begin
      if (last_done >= 0 && clk_cnt - last_done < 2048 + 200) n_short++;
      last_done <= clk_cnt;
      n_cycle++;
    end
    if (spk_out_valid) begin
      n_spk++;
      if (spk_out[N_NEURON+MC_W +: 4] != spk_out[N_NEURON+MC_W+16 +: 4]) begin n_badmc++; if (n_badmc < 4) $display("bad spike address %h", spk_out[N_NEURON +: DA_W]); end   // hc = g * 0x10001
    end
    if (rem_out_valid) n_rem++;
    n_byp  += $countones(st_bypass);
    n_asg  += $countones(st_assign);
    n_drop += $countones(st_drop);
    if (syn_stall) n_stall++;
    if (paused) n_pause++;
  end

  initial begin : watchdog
    #20ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end

  initial begin
    col_prm_t  col;
    post_prm_t post;
    pre_prm_t  pre;
    ncon_t     nc;
    post_ev_t  ev;
    cmd = '0;
    repeat (5) @(posedge clk);
    rst_n = 1; qdr_rst_n = 1;
    repeat (5) @(posedge clk);

    // parameters
    col = '0;
    for (int t = 0; t < N_TYPE; t++) col.ngroup[t] = (t == 0) ? 5'd25 : 5'd0;
    col.prm[0] = '{l_epsc: 8'd200, l_ipsc: 8'd200, l_mem: 8'd230, l_rfc: 8'd128,
                   g_syn: 8'd16, g_psc: 8'd64, v_init: 4'd0};
    post = '0; post.remote = 1'b1; post.nconn = 5'd2; post.delay[0] = 4'd0; post.delay[1] = 4'd1;
    nc = '0; nc[0][0] = 1'b1;
    send(OP_LUT, T_PCAM,   16'd0, 512'd0);
    send(OP_LUT, T_PTYPE,  16'd0, 512'd0);
    send(OP_LUT, T_COLPAR, 16'd0, 512'(col));
    send(OP_LUT, T_POST,   16'd0, 512'(post));
    send(OP_LUT, T_CADDR,  16'd0, 512'd0);
    for (int k = 0; k < 2; k++) begin
      pre = '0; pre.size = 8'd128; pre.hc_size = 8'd128; pre.weight[0] = 8'd7;
      pre.offset = (k == 0) ? 20'd0 : 20'h10001;
      send(OP_LUT, T_PRE,  16'(k), 512'(pre));
      send(OP_LUT, T_NCON, 16'(k), 512'(nc));
    end
    send(OP_REG, 4'd0, R_NSEG,   512'd2);
    send(OP_REG, 4'd0, R_NENTRY, 512'd8);
    send(OP_REG, 4'd0, R_MON_LO, 512'd0);
    send(OP_REG, 4'd0, R_MON_HI, {485'd0, {DA_W{1'b1}}});
    send(OP_REG, 4'd0, R_RUN,    512'd1);

    // one external event from DA minicolumn 0 with 15 spikes of type 0
    ev = '0; ev.src = '0; ev.count[0] = 4'd15; ev.post = post; ev.post.remote = 1'b0;
    send(OP_EVENT, 4'd0, 16'd0, 512'(ev));
    checks++;   // external event accepted

    wait (n_cycle >= 12);
    repeat (10) @(posedge clk);

    check(n_short == 0, $sformatf("%0d TM cycles shorter than 2048+200 clocks", n_short));
    check(n_badmc == 0, "spike from a hypercolumn the address mapper cannot reach");
    check(n_bad_rd == 0, "event region read before it was written");
    check(n_cycle >= 12,  "TM cycles");
    check(n_spk > 0,      "no monitored spike");
    check(n_rem > 0,      "no remote event");
    check(n_ax_wr > 0,    "no axon DDR write");
    check(n_ax_rd > 0,    "no axon DDR read");
    check(n_byp > 0,      "no arbiter bypass");
    check(n_asg > 0,      "no fast-CAM assignment");
    check(n_drop > 0,     "no arbiter drop");
    check(n_stall > 0,    "no synapse stall");
    check(n_pause > 0,    "no minicolumn pause");
    check(n_qwr > 0,      "no QDR write");
    check(n_qrd > 0,      "no QDR read");
    $display("cycles=%0d spikes=%0d remote=%0d axwr=%0d axrd=%0d bypass=%0d assign=%0d drop=%0d stall=%0d pause=%0d qwr=%0d qrd=%0d",
             n_cycle, n_spk, n_rem, n_ax_wr, n_ax_rd, n_byp, n_asg, n_drop, n_stall, n_pause, n_qwr, n_qrd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
