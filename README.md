# A time-multiplexed cortex engine: 2^20 minicolumns of 100 neurons on one FPGA board

The cortex is built from **minicolumns** of 100 spiking neurons grouped into
**hypercolumns**. A brain-sized model has far more minicolumns than any chip
could hold as separate circuits, but at any moment only a small fraction of
them receive input. This design exploits that in two ways:

* **Time multiplexing.** Only 100 physical neurons exist. They form an
  11-stage pipeline that updates one whole minicolumn per clock. The 800-bit
  state of each minicolumn (100 neurons × 4-bit membrane potential + 4-bit
  post-synaptic current) lives in DDR3 and QDR-II memory and is streamed
  through the pipeline once per simulated millisecond. These stored slots are
  the **TM minicolumns**; up to 2^20 of them exist on one board.
* **Dynamic assignment.** The model addresses minicolumns with a 27-bit
  **DA address** (20-bit hypercolumn, 7-bit minicolumn), which gives 2^27
  minicolumns in all. A DA minicolumn only occupies a TM minicolumn while it
  receives events. A content-addressable memory in front of the synapses
  assigns a free TM slot to a DA minicolumn on its first input and frees the
  slot once the minicolumn has gone quiet.

Minicolumns talk through **events**: one event carries the source DA address
and, for each of the 8 neuron types, the number of neurons that spiked
(0..15). Events are delayed by 1..16 ms through DDR memory, expanded into
weighted inputs for up to 128 destination minicolumns per hypercolumn
connection, and accumulated until the destination minicolumn is next updated.

## Parts and data flow

```
 host instructions ──► external_interface ──► parameter_lut (tables)
                              │  registers        ▲         ▲
                              ▼                   │         │
         ┌────────── memory_bus_controller (schedules each 1 ms step) ────────┐
         │ DDR/QDR neural state                         DDR event regions      │
         ▼                                                     ▲  │          │
  minicolumn_array ── events ──► axon_array (TX_FIFO, 16 Delay_FIFOs, RX) ─┘  │
   ▲ read-out of weights                          │ delayed events           │
   └────────────── synapse_array (16 arbiters with fast CAMs) ◄──┘           │
```

| Module | Role |
|---|---|
| `cortex_pkg` | widths, packed records for events, parameters and LUT entries, register map |
| `psc_generator`, `soma` | combinational neuron equations |
| `physical_neuron` | one neuron, 11-stage pipeline |
| `neuron_type_manager` | maps 8 neuron types onto 25 groups of 4 neurons, per-neuron random numbers |
| `events_generator` | counts spikes per type, saturates at 15 (3 stages) |
| `tm_minicolumns` | global TM counter and the 100 physical neurons |
| `minicolumn_array` | issue, read-out, LUT look-up, neurons, event creation |
| `delay_generator` | random choice of which delay region to read |
| `axon_array` | event MUX, TX_FIFO, Delay_FIFOs, DDR region pointers, RX_FIFO |
| `synapse_array` | weight modulator, address mapper, PRE_FIFO, demux to 16 arbiters |
| `arbiter`, `fast_cam` | DA→TM assignment, weight accumulation, release |
| `parameter_lut`, `parallel_cam` | range look-up of parameters and connection patterns |
| `memory_bus_controller`, `async_fifo` | DDR/QDR scheduling, slot timing, pause |
| `external_interface` | host instructions, registers, spike monitor, remote events |
| `cortex_top` | wires everything; memory and host links are its ports |
| `sync_fifo`, `lfsr` | helpers |

## The neuron pipeline

Each neuron follows two leaky equations with stochastic rounding:

    PSC(t+1)  = PSC(t)·L/256 + r + g_syn·W(t)
    Vmem(t+1) = v_init + (Vmem(t) − v_init)·L/256 + r + g_psc·PSC(t+1)

PSC and W are signed 4-bit numbers with a step of 1/8. Vmem is unsigned 4 bits.
The arithmetic carries 5 extra fractional bits filled by a 5-bit random
number `r` and then floors, so only 4 bits per quantity ever need storing. The
leak of the PSC is chosen by its sign (excitatory or inhibitory). The
membrane is *active* when Vmem ≥ v_init and *refractory* otherwise. A
refractory neuron ignores its input and relaxes with its own leak.

* An overflow above 15 caused by a positive PSC is a spike, and Vmem resets
  to 0.
* Any other overflow saturates at 15.
* An underflow gives 0.

`physical_neuron` registers its inputs, the PSC, the soma result, and then 8
more stages, for 11 in all. The stage count matches the paper. The split of
work across the stages is this design's own.

A minicolumn's 100 neurons form 25 groups of 4. The column parameter record
says how many groups belong to each of the 8 types. `neuron_type_manager`
turns those counts into a type per group and hands each neuron its type's
leak, gain and v_init constants. A group left over after the counts stays
disabled and holds {v_init, 0}.

## One simulated millisecond

`memory_bus_controller` runs the step in two phases.

1. **Bursts of neural state.** The TM minicolumns are split into segments of
   1024 (R_NSEG, which must be even).
   * Segment *k* is read from DDR module *k mod 2* while segment *k−1*'s new
     states are written to the other module, so reads and writes never share
     a module.
   * The remaining 288 bits of each state go through QDR-II. The QDR path
     runs on its own clock, and two Gray-pointer `async_fifo`s carry commands
     and results across.
   * `minicolumn_array` issues one TM minicolumn per clock while state is
     available.
2. **Axon slot.** For `R_SLOT` clocks (200 by default) the DDR buses belong
   to the axon array.

**Pause.** When TX_FIFO is more than 95% full, the controller stops issuing
minicolumns until the axon array has drained it. The TX_FIFO must be deep
enough to take all events already in flight when the pause starts (about 25).

The minimum step time is therefore `R_NSEG·1024 + R_SLOT` clocks, which the
top-level test checks.

Per issued TM minicolumn *i*, `minicolumn_array` does the following:

* It asks arbiter `i[3:0]` for its accumulated weights, its DA address and
  whether one is assigned. This read-out also clears the weights.
* It looks up the parameters of that DA address (5 clocks).
* It runs the neurons and counts spikes.
* It sends any non-empty event to the axon array, and spikes to the monitor.
* It reports back whether the minicolumn was active, which the arbiter uses
  to free idle assignments.

## Axon array: delays through DDR

An event's post-connection entry gives up to 16 hypercolumn connections, each
with a delay of 1..16 ms. The TX side works as follows:

* Events from the minicolumns and external events from the host share
  TX_FIFO. The minicolumns have priority.
* Each event is expanded into one pre-synaptic event per connection, placed
  in the Delay_FIFO of its delay.
* In the axon slot, the fullest Delay_FIFO is written as a burst (up to 32)
  into its DDR region. Odd delays live in DDR A and even ones in DDR B.

The RX side reads the regions back. `delay_generator` picks a region at
random, and region *i* is picked with probability proportional to 1/i:

* A 20-bit LFSR is compared with 17 thresholds. Their defaults come from
  `cortex_pkg::default_thr` and can be rewritten (registers 16..32).
* A 10-bit LFSR compared with `R_F` thins the rate.

An event that waits in a region until it is picked has an effective delay
that follows this distribution. This is the stochastic delay model of the
design.

TX and RX share the slot by **cross-locking**. A TX burst is always followed
by an RX burst on the *other* DDR module before the next TX burst starts, so
the two never use the same module at once. An assertion checks this.

## Synapse array and arbiters: where assignment happens

Every 4 clocks the synapse array takes one delayed event {source, connection
*k*, counts} and processes it in four steps.

1. **LUT look-up.** It looks up the pre-connection entry: size, hypercolumn
   offset, 8 weights, and the destination hypercolumn size.
2. **Weighted input.** It forms the input W for each destination type, using
   an 8×8 type-to-type mask.
3. **Address mapping.** It computes the destination hypercolumn as source +
   offset, wrapping at 2^20.
4. **Destination groups.** It emits the destinations as groups of up to 32
   consecutive minicolumns per clock. The start point is a hash of
   (source, *k*), so one connection always reaches the same minicolumns.

Groups are routed to arbiter `hc[19:16]`. Each arbiter handles destinations
one at a time:

* **Fast CAM.** A 128-bank × 64-entry CAM holds one key per 8 consecutive
  minicolumns, `{hc[15:0], mc[6:3]}`. A search scans the banks in at most 64
  clocks.
* **Bypass.** When a destination has the same key as the previous one, the
  search is skipped.
* **Assignment.** A miss takes the next free entry from an index generator.
  This allocates 8 TM minicolumns, and the DA address is now mapped to TM
  index `{entry, mc[2:0], arbiter}`.
* **Drop.** When all `R_NENTRY` entries are in use, the input is dropped and
  counted.
* **Weights.** They are added into a 32-bit-per-slot dual-port buffer: 8 types
  × 4 bits, saturating.
* **Release.** An entry that was not touched by input and whose 8
  minicolumns were all inactive during a full step is freed.

When an arbiter input FIFO is almost full, the synapse array stops reading
events (`syn_stall`).

## Parameter LUT

Neighbouring DA minicolumns usually share parameters, so the tables are
indexed by *range*. A 512-entry `parallel_cam` holds ascending start
addresses in flip-flops and returns the range index in 3 clocks, for two
lookups at once. Both ports of `parameter_lut` have a latency of 5 clocks.

* **Minicolumn port:** range → parameter type → column parameters, and
  range → post-connection entry.
* **Synapse port:** range → connection base; base + *k* → pre-connection
  entry and type mask.

## Host interface

`external_interface` takes 536-bit instructions
(`cortex_pkg::host_cmd_t`):

| Opcode | Action |
|---|---|
| `OP_LUT` | write a table entry (`sel` = table, `addr` = entry) |
| `OP_REG` | write a register: run, segments, slot length, f, monitored DA range, fast-CAM entries in use, delay thresholds |
| `OP_EVENT` | inject an event into the axon array; the instruction waits until it is accepted |

Spikes of DA minicolumns inside the monitored range leave through the spike
FIFO as {address, 100 spike bits}. Events whose post entry is marked remote
leave through the remote FIFO. Entries that find a FIFO full are counted in
`dropped`.

## Simulating

Every block file is self-contained apart from `cortex_pkg.sv`, which must
come first. For example:

    verilator --binary --timing -Wno-fatal --top-module tb_cortex_top \
        rtl/cortex_pkg.sv rtl/*.sv tb/tb_cortex_top.sv
    ./obj_dir/Vtb_cortex_top

Each testbench ends with `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_psc_generator` | against an integer model, 20k random cases |
| `tb_soma` | against an integer model, 20k random cases |
| `tb_events_generator` | counts and the 3-clock latency |
| `tb_delay_generator` | the 1/i distribution to ±15% and the f thinning |
| `tb_parallel_cam` | range index on both ports against a model, 3-clock latency |
| `tb_fast_cam` | full-size CAM: hit index, miss, clear, read-back, search ≤ 66 clocks |
| `tb_async_fifo` | order and completeness across two unrelated clocks, full flag |
| `tb_external_interface` | register map and reset values, LUT and event instructions, spike monitor range and losses |
| `tb_physical_neuron` | 11-clock latency and results against an integer model, disabled neurons |
| `tb_cortex_top` | end to end, see below |

`tb_cortex_top` uses DDR3 and QDR-II behavioural models. It programs a small
network through host instructions and starts it with one external event. It
then runs 12 steps of 2048 TM minicolumns. It checks:

* the minimum step length;
* the address mapping of every monitored spike;
* that no event region is read before it was written;
* that every mechanism occurred at least once: spike, remote event, axon DDR
  write and read, bypass, assignment, drop, synapse stall, pause, QDR write
  and read.

The network is deliberately overloaded, so stalls and pauses dominate its
run time. It runs the paper's sizes except for TX_FIFO, which is 512 entries
so that the pause is reached. With the default 2048 entries this small
network never fills TX_FIFO, so there is no separate full-size top test.

Not tested on their own, only through the top test:
`neuron_type_manager`, `tm_minicolumns`, `minicolumn_array`, `axon_array`,
`arbiter`, `synapse_array`, `parameter_lut` and `memory_bus_controller`. The top test
only shows that these blocks work together in one configuration. It does not
check each of their corner cases.

## Departures and own choices

* **Rates and latencies.**
  * The pipeline depths follow the source: neuron 11, events generator 3,
    parameter CAM 3, LUT 5, synapse pipeline 12, fast-CAM search ≤ 64
    clocks.
  * The split of work inside them is this design's own.
* **Number formats and record layouts.** The fixed-point alignment, the
  sign-selected PSC leak, saturation, and every packed record layout are own
  choices.
* **Events in DDR.** One event is stored per 512-bit DDR word, which is
  simple but wastes bandwidth. The paper does not give the packing.
* **TM index interleave and release.** The interleave (arbiter = low 4 bits)
  and the activity-based release rule are own choices. The paper says only
  that assignments are made dynamically.
* **Clock rate.** No clock rate is built in. Real-time operation with about
  200k TM minicolumns per step needs about 200 MHz.
* **Full-size synthesis.** The full-size top has 16 fast CAMs of 8192×20
  bits in flip-flops plus large buffers. Generic synthesis of the whole top
  did not finish within ten minutes, so no cell count for it is given here.
* **Lint warnings.** The remaining lint warnings are unused bits of
  status/count outputs and of hash products, which are intentional.
