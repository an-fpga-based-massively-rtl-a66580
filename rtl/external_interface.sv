// external_interface: the Master's link to the host and to other boards.
//
// Instruction decoding: every host instruction (cortex_pkg::host_cmd_t) is
//   OP_LUT    write entry `addr` of parameter-LUT table `sel` with `data`
//   OP_REG    write system register `addr` (run, segments, slot length, f,
//             monitor range, fast-CAM entries in use, delay thresholds)
//   OP_EVENT  inject an external event (a post_ev_t in data) into the event
//             MUX of the axon array; the instruction waits until accepted
// Output: spikes of TM minicolumns whose DA address lies in the monitor range
// go, with that address, into SPK_FIFO; events marked for other boards go
// into a second FIFO. When a FIFO is full the entry is dropped and counted.
// The paper names these functions; the instruction format, the register map
// and the FIFO depths are this design's own.
module external_interface
  import cortex_pkg::*;
#(
  parameter int SPK_DEPTH = 64,
  parameter int REM_DEPTH = 64,
  parameter int EW        = 13
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host instructions
  input  logic                 cmd_valid,
  input  host_cmd_t            cmd,
  output logic                 cmd_ready,
  // configuration outputs
  output logic                 lut_wr,
  output lut_table_e           lut_sel,
  output logic [15:0]          lut_addr,
  output logic [511:0]         lut_data,
  output logic                 run,
  output logic [10:0]          nseg,
  output logic [15:0]          slot_cycles,
  output logic [9:0]           f,
  output logic [EW:0]          n_entry,
  output logic [16:0][19:0]    thr,
  // external events to the axon array
  output logic                 ext_ev_valid,
  output post_ev_t             ext_ev,
  input  logic                 ext_ev_ready,
  // spikes and remote events from the neural engine
  input  logic                 spk_valid,
  input  logic [DA_W-1:0]      spk_addr,
  input  logic [N_NEURON-1:0]  spk,
  input  logic                 rem_valid,
  input  post_ev_t             rem_ev,
  // to the host
  output logic                 spk_out_valid,
  output logic [DA_W+N_NEURON-1:0] spk_out,
  input  logic                 spk_out_ready,
  output logic                 rem_out_valid,
  output post_ev_t             rem_out,
  input  logic                 rem_out_ready,
  output logic [15:0]          dropped
);
  logic [DA_W-1:0] mon_lo, mon_hi;

  wire is_ev = cmd.op == OP_EVENT;
  assign cmd_ready    = !is_ev || ext_ev_ready;
  assign ext_ev_valid = cmd_valid && is_ev;
  assign ext_ev       = cmd.data[$bits(post_ev_t)-1:0];

  assign lut_wr   = cmd_valid && cmd.op == OP_LUT;
  assign lut_sel  = lut_table_e'(cmd.sel);
  assign lut_addr = cmd.addr;
  assign lut_data = cmd.data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; nseg <= 11'd2; slot_cycles <= 16'd200; f <= '0;
      mon_lo <= '0; mon_hi <= '0; n_entry <= (EW+1)'(1 << EW);
      for (int i = 0; i <= N_DELAY; i++) thr[i] <= default_thr(i);
    end else if (cmd_valid && cmd.op == OP_REG) begin
      case (cmd.addr)
        R_RUN:    run         <= cmd.data[0];
        R_NSEG:   nseg        <= cmd.data[10:0];
        R_SLOT:   slot_cycles <= cmd.data[15:0];
        R_F:      f           <= cmd.data[9:0];
        R_MON_LO: mon_lo      <= cmd.data[DA_W-1:0];
        R_MON_HI: mon_hi      <= cmd.data[DA_W-1:0];
        R_NENTRY: n_entry     <= cmd.data[EW:0];
        default:
          if (cmd.addr >= R_THR0 && cmd.addr <= R_THR0 + 16'(N_DELAY))
            thr[5'(cmd.addr - R_THR0)] <= cmd.data[19:0];
      endcase
    end
  end

  // SPK_FIFO and remote-event FIFO
  logic spk_full, spk_empty, rem_full, rem_empty, spk_push;
  assign spk_push = spk_valid && spk_addr >= mon_lo && spk_addr <= mon_hi;
  sync_fifo #(.W(DA_W + N_NEURON), .DEPTH(SPK_DEPTH)) u_spk (
    .clk(clk), .rst_n(rst_n), .push(spk_push && !spk_full), .wr_data({spk_addr, spk}),
    .pop(spk_out_ready), .rd_data(spk_out), .full(spk_full), .empty(spk_empty), .count());
  sync_fifo #(.W($bits(post_ev_t)), .DEPTH(REM_DEPTH)) u_rem (
    .clk(clk), .rst_n(rst_n), .push(rem_valid && !rem_full), .wr_data(rem_ev),
    .pop(rem_out_ready), .rd_data(rem_out), .full(rem_full), .empty(rem_empty), .count());
  assign spk_out_valid = !spk_empty;
  assign rem_out_valid = !rem_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) dropped <= '0;
    else        dropped <= dropped + 16'(spk_push && spk_full) + 16'(rem_valid && rem_full);
  end
endmodule
