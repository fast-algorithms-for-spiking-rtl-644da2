# Horizon-buffered spiking network simulator in SystemVerilog

This design simulates a large network of leaky integrate-and-fire (LIF) neurons
in fixed time steps of 0.1 ms. Its default size is the cortical microcircuit model
of Potjans and Diesmann: 77,169 neurons and about 300 million synapses, with delays
of up to 64 steps.

Updating the neurons is cheap. Delivering spikes is the expensive part: every spike
must add its weight to the input current of thousands of target neurons, each at
its own delay. The design's main idea is how it organises that delivery. It has
three parts:

* a small **horizon buffer** of pending currents, H = 16 steps deep instead of 64;
* a **neuron queue** that remembers who spiked during the last 64 steps;
* synapses stored **interleaved by destination class**, so that SC = 32 synapses
  can be added into 32 separate memory banks in one cycle with no conflicts.

The work is split over two hardware kernels that run side by side and talk only
through two FIFO channels:

```
               thalamic counts (off chip)            synapse index + rows (off chip)
                        |                                        |
                        v                                        v
   +------------------------------+  to_update (UW currents) +-------------------------+
   | neuron_update                | <----------------------- | spike_transfer          |
   |  state RAM (u, i, r)         |                          |  horizon_buffer W[H][N] |
   |  UW x lif_lane               | -----------------------> |  neuron_queue           |
   +------------------------------+  to_transfer (index/DONE)|  SC x fp32_add          |
                                                             +-------------------------+
```

`snn_top` holds these four blocks. Off-chip memory and the host stay outside, as ports.

## Neuron model

Each neuron has a membrane potential `u`, a presynaptic current `i` (both IEEE 754
single precision) and a refractory counter `r`. Potentials are measured from the
resting potential, so rest and reset are both 0 and the threshold is +15 mV.

For each step `t`, with `w` the synaptic current delivered for this step and `T`
the number of external (thalamic) spikes:

```
i += w
if r == 0:
    x     = P22*u + P21*i
    spike = (x >= 15.0)
    u     = spike ? 0 : x
    r     = spike ? 20 : 0          # 2 ms refractory period
else:
    u = 0;  r -= 1
i = P11*i + T*WPSN
```

The constants are those of the microcircuit model:

| Constant | Value | Meaning |
|---|---|---|
| P11 | exp(-0.1/0.5) = 0.81873 | current decay |
| P22 | exp(-0.1/10) = 0.99005 | membrane decay |
| P21 | 0.00036067 | current-to-membrane propagator |
| WPSN | 585 pA x 0.15 = 87.808 | weight of one thalamic spike |

`lif_lane` does one such update in one clock cycle, using four multipliers and two
adders. `fp32_mul` and `fp32_add` round to nearest even. Subnormal results are
flushed to zero, and overflow saturates to infinity.

## Spike delivery with a horizon

A synapse with delay `d` (1..64) fires its weight into the target's current `d`
steps after the sender spiked.

Keeping a full 64-row buffer of future currents for every neuron would not fit on
chip. Working through the queue of spikes for every delay separately would make
the parallel loops too short. The horizon scheme sits between the two. The delays
are cut into D_MAX/H = 4 windows of H = 16 delays each:

| Window | Delays |
|---|---|
| 0 | 1..16 |
| 1 | 17..32 |
| 2 | 33..48 |
| 3 | 49..64 |

Every step `t` of the transfer kernel works as follows:

1. **Sync.** Row `t mod H` of the horizon buffer holds every current due at step
   `t`. It is streamed to the update kernel, UW words per beat, and cleared as it
   is read.
2. **Windows.** For window `k = 0..3`, take the neurons that spiked at step
   `t - 16k - 1`. These are stored in queue slot `rt = (t - 16k - 1) mod 64`. For
   each such neuron, activate its synapses with delays in window `k`, adding each
   weight to `W[(t + d) mod 16][j]`.

   Row `(t + d) mod 16` is drained at step `t + d - 16k`. That step is between
   `t + 1` and `t + 16`, so a 16-row buffer is enough, and no row is written
   after it has been drained for the step it serves.
   A neuron's synapses are thus read four times, once per window, each time in
   one contiguous chunk.
3. **Receive.** The indices of the neurons that spiked in step `t` arrive from the
   update kernel and go into slot `t mod 64`. Opening the slot discards the
   entries it held 64 steps ago.

For example, at t = 100 the four windows read slots 35, 19, 3 and 51.

Spikes take effect one step later than in a plain delay-line simulator. Every
delay is therefore counted from `16k + 1`, not `16k`.

## Update kernel and the two channels

For each step, `neuron_update` makes two sweeps over the state memory, UW = 32
neurons per cycle.

* The **collect** sweep adds the currents arriving on `to_update` to `i`.
* The **update** sweep runs the LIF lanes with the thalamic counts of the step.
  It sends the index of each neuron that spiked on `to_transfer`, then a DONE word.

Both sweeps keep one row per cycle. The state RAM has a one-cycle read, and row
k+1 is read in the same cycle row k is written.

The two sweeps are not a matter of convenience. Suppose the kernel instead added
the current and updated a row in the same pass. Then a step with more spikes than
`to_transfer` can hold deadlocks:

* the update kernel waits for space in `to_transfer`;
* the transfer kernel is still in its sync phase, waiting for space in
  `to_update`, and does not read `to_transfer`.

Collecting every current first means the sync phase has always finished before
the first spike is sent. This holds whatever the channel depths and spike counts.

The update of step `t` overlaps the transfer kernel's window phase of step `t`.
The next step begins when the transfer kernel starts streaming the next horizon
row.

Spikes are sent one index per cycle. While a row has spikes still to send, the
sweep stalls. `update_stall_cycles` counts these cycles. The DONE word is the
index field with an extra flag bit `{1, 0}`.

## Synapse storage and the index

The off-chip synapse array consists of rows of SC 64-bit records:

| Bits | Field |
|---|---|
| [63:32] | weight, single precision |
| [31:8] | destination neuron (17 bits used) |
| [7:0] | delay mod 64 (6 bits used) |

Lane `c` of a row always holds a synapse whose destination `j` satisfies
`j mod SC = c`. The horizon buffer is banked the same way, with bank `c` holding
neurons `c, c+SC, c+2SC, ...`. All SC lanes of a row can therefore
read-modify-write their own bank in the same cycle.

When a neuron has fewer synapses in a class than in its largest class, the gaps are
filled with zero-weight synapses. The hardware never tests for vacancies. This
costs some memory: typically 5-30% more than packed storage.

The index holds row offsets. Entry `neuron*(D_MAX/H) + k` is one 64-bit word
`{end, start}`. It gives the half-open row range of that neuron's synapses in
window `k`.

A neuron in a window therefore costs:

* one index read;
* `end - start` synapse row reads, issued back to back;
* one cycle per returned row to accumulate it.

Only one neuron's rows are in flight at a time.

## Memories and sizes at the defaults

| Memory | Organisation | Size |
|---|---|---|
| Neuron state | 2,412 rows x 32 neurons x 72 bit | 5.6 Mbit |
| Horizon buffer | 16 x 77,169 fp32 in 32 banks of 38,592 words | 39.5 Mbit |
| Neuron queue | 4,096 x 17 bit, plus 64 slot heads and counts | ~70 kbit |
| to_update channel | 16 x 1,024 bit | 16 kbit |
| to_transfer channel | 512 x 18 bit | 9 kbit |
| Synapses (off chip) | ~300 M x 8 B plus filler | ~2.5-3.1 GB |

In the microcircuit about 23 neurons spike per step. The 64 live queue slots then
hold about 1,500 entries, well below the depth of 4,096. If the queue does
overflow, the spike is dropped, and `queue_overflows` counts it.

## Interfaces (snn_top)

* **Run control**
  * `start` is a one-cycle pulse that runs `n_steps` steps.
  * `busy` stays high until both kernels have finished.
* **Initial state**
  * While idle, write rows of UW `{u, i, r}` records through
    `init_we/init_addr/init_data`.
  * The horizon buffer is cleared by hardware at the start of a run.
* **Thalamic input**
  * `thal_valid/ready/data` carries UW 8-bit counts per beat.
  * Each step consumes one beat per state row, during the update sweep.
* **Index port**
  * The request is `idx_req_valid/ready/addr`.
  * The response is `idx_rsp_valid/data` (`{end, start}`).
* **Synapse port**
  * The request is `syn_req_valid/ready/addr` (row number).
  * The response is `syn_rsp_valid/data` (SC records).
* **Both memory ports**
  * Responses come back in order and are always accepted.
  * The latency is arbitrary.
* **Observation**
  * `spike_valid/idx/step` reports every spike.
  * The statistics outputs are `update_stall_cycles`, `rows_done`,
    `queue_overflows`, `queue_occupancy`, `to_transfer_full` and
    `to_update_level`.

## Timing

With no spikes, the update kernel needs `2*ceil(N/UW) + 3` cycles per step. At
the defaults that is 4,827 cycles.

The transfer kernel's window phase is bounded by memory latency. Each queued
neuron costs, per window:

* an index round trip;
* its rows;
* one read latency.

At ~23 spikes per step and 64 live queue slots, roughly 1,500 neuron-window visits
are made per step.

The design is written for clarity of the algorithm, not for clock frequency:

* The floating-point units are combinational.
* The horizon buffer uses a same-cycle read, so that the read-modify-write
  `W += w` completes in one cycle.

A high-frequency build would pipeline both and forward between back-to-back
updates of the same word.

## Where this RTL departs from the published design

The published design is a high-level-synthesis kernel pair. This RTL follows its
algorithm and block structure but fills in, or differs in, the following:

* **Index granularity.** The published index has an entry per sender and delay,
  read twice (start and end). Here it has one entry per sender and window, read
  once as a `{start, end}` pair. Only window boundaries are ever looked up.
* **Window call.** The published two-kernel listing writes the window lookup as
  `syns_from(n, rt + H)`, while its single-kernel listing uses the delay range
  `16k+1 .. 16k+16`. This RTL uses the delay range.
* **No prefetching** of synapses across neurons. Only one neuron's synapses are
  in flight, so throughput is latency bound.
* **Horizon buffer** read asynchronously for a single-cycle read-modify-write.
  The combinational FP units are not pipelined.
* **Floating point.** Subnormals are flushed to zero.
* **Variants not built.** Only the single-precision, two-kernel horizon
  configuration (UW = 32, H = 16, SC = 32) is built. That configuration had the
  best published real-time factor (0.79 at about 600 MHz). The following are
  not built:
  * the double-precision variants;
  * the single-kernel variant;
  * the families that keep the spike buffer off chip or transfer spikes just in
    time.

  The published comparison table names the single-kernel horizon simulator as
  the representative result, while the text names the two-kernel one as
  fastest. The two differ by 0.02 in real-time factor.
* **Outside the RTL.** The thalamic Poisson spike counts and the network
  construction are left to the host. The DDR4 memory and its controller are
  outside the RTL, as ports.
* **Channel depths** (16 and 512) and the DONE encoding are this design's choice.

## Files

`rtl/`:

* `snn_pkg.sv`: types (`fp32_t`, `neuron_state_t`, `synapse_t`), model constants,
  and the helpers `fp_ge` and `u8_to_fp`.
* `fp32_mul.sv`, `fp32_add.sv`: combinational single-precision units.
* `lif_lane.sv`: one neuron update.
* `neuron_state_ram.sv`: row-organised state memory.
* `neuron_update.sv`: update kernel.
* `channel_fifo.sv`: valid/ready FIFO used for both channels.
* `horizon_buffer.sv`: banked W[H][N].
* `neuron_queue.sv`: per-timestamp spike queue.
* `spike_transfer.sv`: transfer kernel.
* `snn_top.sv`: the simulator.

`tb/`:

* `tb_<block>.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=.. failures=..`.
* `fp_ref_pkg.sv`: reference arithmetic. It computes in double precision and
  rounds to single after every operation.
* `ddr_read_model.sv`: in-order read port with latency and random back-pressure.
* `snn_tb_env.sv`: the end-to-end harness. It does the following:
  * generates a network from hash functions;
  * runs a reference simulation;
  * checks every spike, in order, and the final state of every neuron;
  * counts each mechanism (stalls, all four windows, horizon reuse, zero lanes,
    a full spike channel, queue overflow) and fails any that never occurred.
* `tb_snn_top.sv`: a small network (200 neurons, UW = 4, SC = 8, H = 4,
  D_MAX = 16, queue of 16) that forces queue overflows and channel back-pressure.
* `tb_snn_top_full.sv`: the default-size simulator (77,169 neurons) for 60 steps.
  It compiles in about half a minute and runs in a few seconds.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/snn_pkg.sv tb/fp_ref_pkg.sv rtl/fp32_add.sv rtl/fp32_mul.sv rtl/lif_lane.sv \
  rtl/neuron_state_ram.sv rtl/neuron_update.sv rtl/channel_fifo.sv \
  rtl/horizon_buffer.sv rtl/neuron_queue.sv rtl/spike_transfer.sv rtl/snn_top.sv \
  tb/ddr_read_model.sv tb/snn_tb_env.sv tb/tb_snn_top.sv --top-module tb_snn_top
./obj_dir/Vtb_snn_top
```

Replace the last file and `--top-module` to run another testbench. Unit
testbenches need only their block, its submodules, `snn_pkg.sv` and
`fp_ref_pkg.sv`.

To change the design's size, override the parameters of `snn_top`:
`N, UW, SC, H, D_MAX, QDEPTH, UPD_DEPTH, SPK_DEPTH`. Two rules apply:

* `SC` must be a multiple of `UW`.
* `D_MAX` must be a multiple of `H`.

Assertions check both. The model constants in `snn_pkg.sv` are parameters of
`lif_lane`.
