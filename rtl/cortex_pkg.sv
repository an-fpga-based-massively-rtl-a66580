// cortex_pkg: types and constants shared by the cortex simulator.
//
// The simulator time-multiplexes one physical minicolumn of 100 LIF neurons
// over up to 1M (2^20) time-multiplexed (TM) minicolumns, each of which is
// dynamically assigned to one of 128M (2^27) addressable (DA) minicolumns.
// A DA minicolumn address is {hypercolumn[19:0], minicolumn[6:0]}.
// Events between minicolumns carry spike counts, one 4-bit count per neuron
// type, never individual spikes.
//
// Sizes follow the paper (100 neurons, 8 types, 16 axonal delays, 27-bit
// addresses, 1k segments, 512-bit DDR and 72-bit QDR words). The bit layout
// of every packed record below is this design's own choice.
package cortex_pkg;

  localparam int N_NEURON  = 100;   // physical neurons in the physical minicolumn
  localparam int N_GROUP   = 25;    // groups of 4 neurons (type counts are multiples of 4)
  localparam int N_TYPE    = 8;     // neuron types per minicolumn
  localparam int N_DELAY   = 16;    // axonal delays, 1..16 ms
  localparam int N_ARB     = 16;    // arbiters in the synapse array
  localparam int TM_BITS   = 20;    // 1M TM minicolumns
  localparam int DA_W      = 27;    // DA minicolumn address
  localparam int HC_W      = 20;    // hypercolumn address
  localparam int MC_W      = 7;     // minicolumn within a hypercolumn (up to 128)
  localparam int SEG_LEN   = 1024;  // TM minicolumns per segment / DDR burst
  localparam int DDR_W     = 512;
  localparam int QDR_W     = 72;
  localparam int N_QDR     = 4;
  localparam int STATE_W   = 8 * N_NEURON;  // 800 bits per TM minicolumn
  localparam int DDR_ADDR_W = 27;   // 128M words per DDR
  localparam int QDR_ADDR_W = 20;   // 1M words per QDR

  // Per-neuron state: Vmem and PSC, 4 bits each.
  typedef struct packed {
    logic [3:0] v;     // membrane potential, unsigned
    logic [3:0] psc;   // post-synaptic current, signed Q1.3
  } nstate_t;

  // Parameters of one neuron type (leak rates L ~ 256*tau/(tau+1), gains LSB 1/16).
  typedef struct packed {
    logic [7:0] l_epsc;
    logic [7:0] l_ipsc;
    logic [7:0] l_mem;
    logic [7:0] l_rfc;
    logic [7:0] g_syn;
    logic [7:0] g_psc;
    logic [3:0] v_init;
  } type_prm_t;   // 52 bits

  // Column parameter buffer entry: groups of 4 neurons per type and type parameters.
  typedef struct packed {
    logic [N_TYPE-1:0][4:0] ngroup;
    type_prm_t [N_TYPE-1:0] prm;
  } col_prm_t;    // 8*5 + 8*52 = 456 bits

  // Post-connection buffer entry: routing of the events a minicolumn emits.
  typedef struct packed {
    logic                      remote;   // events also go to other boards
    logic [4:0]                nconn;    // 0..16 hypercolumn connections
    logic [N_DELAY-1:0][3:0]   delay;    // delay[k]+1 ms for connection k
  } post_prm_t;   // 70 bits

  // Pre-connection buffer entry: one hypercolumn connection.
  typedef struct packed {
    logic [7:0]              size;     // destination minicolumns (0..128)
    logic [HC_W-1:0]         offset;   // destination hc = source hc + offset (wraps)
    logic [N_TYPE-1:0][7:0]  weight;   // signed weight per source type, LSB = 1/8
    logic [7:0]              hc_size;  // minicolumns in the destination hypercolumn
  } pre_prm_t;    // 100 bits

  // Neuron-connection buffer entry: mask[d][s] connects source type s to destination type d.
  typedef logic [N_TYPE-1:0][N_TYPE-1:0] ncon_t;

  // Event leaving a minicolumn (post-synaptic event).
  typedef struct packed {
    logic [DA_W-1:0]          src;
    logic [N_TYPE-1:0][3:0]   count;
    post_prm_t                post;
  } post_ev_t;    // 27+32+70 = 129 bits

  // Event after the axonal delay, one per connection (pre-synaptic event).
  typedef struct packed {
    logic [DA_W-1:0]          src;
    logic [3:0]               conn;
    logic [N_TYPE-1:0][3:0]   count;
  } pre_ev_t;     // 63 bits

  // A group of destination minicolumns in one hypercolumn sharing one weight word.
  typedef struct packed {
    logic [HC_W-1:0]          hc;
    logic [MC_W-1:0]          base;     // first destination minicolumn
    logic [5:0]               count;    // 1..32 destinations
    logic [7:0]               hc_size;  // wrap modulus
    logic [N_TYPE-1:0][3:0]   w;        // signed Q1.3 weight per destination type
  } dst_grp_t;

  // Host instruction, decoded by the external interface.
  typedef enum logic [3:0] {
    OP_NOP = 4'd0, OP_LUT = 4'd1, OP_REG = 4'd2, OP_EVENT = 4'd3
  } opcode_e;

  typedef enum logic [3:0] {
    T_PCAM = 4'd0, T_PTYPE = 4'd1, T_COLPAR = 4'd2, T_POST = 4'd3,
    T_CADDR = 4'd4, T_PRE = 4'd5, T_NCON = 4'd6
  } lut_table_e;

  typedef struct packed {
    opcode_e     op;
    logic [3:0]  sel;     // LUT table or unused
    logic [15:0] addr;    // table entry or register number
    logic [511:0] data;
  } host_cmd_t;

  // System registers written by OP_REG (register number in addr).
  localparam logic [15:0] R_RUN      = 16'd0;  // data[0]: simulation runs
  localparam logic [15:0] R_NSEG     = 16'd1;  // segments per update cycle (even)
  localparam logic [15:0] R_SLOT     = 16'd2;  // axon slot length in cycles
  localparam logic [15:0] R_F        = 16'd3;  // global delay probability f
  localparam logic [15:0] R_MON_LO   = 16'd4;  // monitored DA address range
  localparam logic [15:0] R_MON_HI   = 16'd5;
  localparam logic [15:0] R_NENTRY   = 16'd6;  // fast CAM entries in use per arbiter
  localparam logic [15:0] R_THR0     = 16'd16; // 16+i: delay threshold T_i, i = 0..16

  // DDR request as seen by the memory bus controller.
  typedef struct packed {
    logic                  we;
    logic [DDR_ADDR_W-1:0] addr;
    logic [DDR_W-1:0]      wdata;
  } ddr_req_t;

  // Default delay-generator thresholds: T_0 = 0, T_i - T_(i-1) = R_i where R_i is
  // P_i = P_1/i (paper Eqs. 3-4) scaled to 2^20; computed with integers as
  // R_i = 2^20 * (720720/i) / sum_j(720720/j), 720720 being lcm(1..16).
  function automatic logic [19:0] default_thr(input int i);
    longint unsigned tot, acc;
    tot = 0; acc = 0;
    for (int j = 1; j <= N_DELAY; j++) tot += 64'd720720 / 64'(j);
    for (int j = 1; j <= i; j++) acc += 64'd720720 / 64'(j);
    if (i >= N_DELAY) return 20'hFFFFF;
    return 20'((acc << 20) / tot);
  endfunction

  // Saturate a signed value to the signed 4-bit range.
  function automatic logic [3:0] sat4(input logic signed [15:0] x);
    if (x > 16'sd7) return 4'sd7;
    else if (x < -16'sd8) return 4'b1000;
    else return x[3:0];
  endfunction

endpackage
