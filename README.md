# Subthreshold SRAM compute-in-memory accelerator for spiking neural networks

This accelerator runs the convolution layers of a spiking neural network (SNN) inside an SRAM array.
Activations are binary spikes and weights are ternary (-1, 0, +1). Each binary input drives one
read wordline of an 8T SRAM array, and all 1024 wordlines fire in the same cycle. Each stored
weight cell then sinks one unit of current into its bitline. So the current on a bitline is the
dot product of the input with one weight column, computed in one step and without partial sums.

A neuron cell integrates the difference between a neuron's positive and negative bitline
currents. It compares the result against a threshold current made by replica SRAM cells and
gives out one bit: a spike. Because the readout is a single bit, there are no multi-bit ADCs.

Two system-level ideas make this work at scale.

- **In-situ regulation.** The array runs in the subthreshold region, at roughly 0.22 to 0.33 V
  instead of 0.9 V, so a cell draws about 200 nA instead of tens of µA. In that region the cell
  current depends exponentially on supply and temperature. Each subbank therefore has ten
  monitor cells that always store 1. An error amplifier adjusts the subbank supply until those
  cells draw a reference current. Every cell then carries the same unit current across
  temperature, and the current sum stays a count.
- **Stride-tick batching.** An SNN repeats every layer over several timesteps (1 to 3 here).
  The accelerator computes all timesteps of one input window back to back before moving the
  window by the stride. The membrane potential therefore never leaves the neuron's capacitor,
  and no membrane buffer is needed. Each timestep has its own line buffer, so input reuse is
  not lost.

The RTL here models this design at the level of what crosses the clock edge. The array,
neurons and regulators are analog in silicon. They appear as behavioural models that compute
the ideal result: exact unit-current counts and an exact integer membrane. The controllers,
buffers and memories are ordinary synthesizable logic.

## Block diagram

```
            host FM port                      host weight / threshold ports
                 |                                   |
   +-------------v-------------+              +------v------------------------+
   |  FM SRAM  8192 x 128 bit  |--read------->| line buffer T1 | T2 | T3      |
   |  (1 read + 1 write port)  |              |   1024 bit each, sliding      |
   +-------------^-------------+              +------+------------------------+
                 |                                   | wl_sel (timestep)
                 | write                      +------v------+
   +-------------+-------------+              | wordline reg |  1024 bits
   | PWB: MUX -> output buffer |              +------+------+
   |  -> 128 OR + mp buffers   |                     | RWL
   |  -> write buffer          |              +------v------------------------------+
   +----^-----------------^----+              | CIM array 1024 WL x 5 sets x 256 BL |
        | short cut path  | spikes            |  (subbank supply from regulators)   |
        | (FM read data)  |                   +------+------------------------------+
                          |                          | I_P, I_N per neuron (unit counts)
                          |                   +------v------+
                          +-------------------| 128 neurons |  (threshold = replica cells)
                                              +-------------+
                                 I_P, I_N --> output accumulator (final block, cfg.accum)
   stb_ctrl: schedule, FM read addresses, line buffer shifts, tags
   supply_sequencer + 64 x supply_regulator: data access mode <-> CIM mode
```

## Data representation

- **Feature maps.** A layer's input is a 1-D sequence of positions (audio frames in the
  keyword-spotting model), each with `cin` binary channels, for each of `ts` timesteps. One FM
  SRAM word holds one position of one timestep. Channel `c` is bit `c`, and bits at or above
  `cin` are ignored. A layer whose input starts at `in_base` finds position `p`, timestep `t` at
  word `in_base + p*ts + t`. Its output is written with the same layout from `out_base`. The
  output of one layer is therefore directly the input of the next.
- **Wordline vector.** A kernel covers `K` consecutive positions. The line buffer presents
  them as `K*cin` bits: tap `j` (0 = oldest position) and channel `c` drive wordline
  `N_WL - K*cin + j*cin + c`. Every layer of the keyword-spotting network has `K*cin = 1024`,
  which gives 8x128, 16x64 and 128x8.
- **Weights.** Neuron `n` owns two bitlines. A weight of +1 stores a 1 in the positive cell,
  -1 stores a 1 in the negative cell, and 0 stores neither. A weight row as written through
  `w_data` has bit `2n` as the positive cell of neuron `n` and bit `2n+1` as its negative cell.
  The array holds five such 256-bit weight sets side by side, and a layer selects one with
  `wset`. Five sets use 1280 of the 1304 physical bitlines.

## The neuron and its threshold

Per timestep, each neuron receives `dot = I_P - I_N` as integer unit counts. It follows

```
V[t] = V[t-1] * (1 - S[t-1]) + dot[t]          S[t] = (V[t] >= TH)
```

The membrane is preset at the first timestep of each window and again after every spike. So
within a group of `ts` timesteps, a neuron can fire, reset and fire again. With `ts = 1`, every
step is a preset, and the cell acts as a binary CNN neuron: it fires when `dot >= TH`.

In silicon the threshold is not a voltage. It is a current `I_TH` from five replica SRAM cells,
injected into the negative integrator at each preset. The replica cells carry the same
regulated unit current as the array, so the threshold tracks the cells across process,
voltage and temperature (PVT). The model therefore stores five threshold bits per neuron, and
`TH` is the number of those bits that are 1 (0 to 5). `neuron_cell.vmem` holds `V - TH`.

The neuron's analog phases within one clock period (preset, integrate, compare, hold) are not
modelled. The model updates the membrane and the spike on one clock edge.

### The final block: accumulate instead of fire

The network's last block has no firing neuron. Its membrane input is summed over every
timestep and every output position. The sum is averaged over positions (global average
pooling) and goes to the classifier. `output_accumulator` holds one signed 32-bit sum per
neuron. A layer started with `cfg.accum = 1` clears all sums. It then adds `I_P - I_N` of
every op to the sums, without threshold, reset or leak, and counts the ops. The average is
`acc_sum / acc_ops`. The divisor is the same for all neurons, so the classifier applies it,
together with its own weights. Such a layer still writes its spikes to the FM SRAM like any
other layer.

## Stride-tick schedule (`stb_ctrl`)

This part takes the most care. The FM SRAM has one read port, which gives one 128-bit word
per cycle. A layer then runs as follows.

1. **Prefill**, `K*ts` cycles. Words `in_base ... in_base+K*ts-1` are read in address order.
   Word `r` is shifted into line buffer `r mod ts`. Each buffer then holds positions `0..K-1`
   of its timestep.
2. **Run**, one step per (block `b`, timestep `t`, `s = 0..stride-1`):
   - at `s = 0`, line buffer `t` is copied into the wordline register. This is a compute, and
     its tag is `{b, t, first = (t==0)}`;
   - on the same edge, position `b*stride + K + s` of timestep `t` is shifted into line buffer
     `t`. The wordline register takes the value from before the shift, so a buffer can be
     computed and refilled in the same cycle.

   Each FM read is issued one cycle ahead of its shift.
3. **Drain**, 6 cycles, to empty the compute and write-back pipeline. Then `done` pulses.

A convolution layer therefore takes

```
cycles = 1 + K*ts + Nout*ts*stride + 6 + stall cycles,   Nout = (in_len - K)/stride + 1
```

With stride 1, this is one compute per cycle after the prefill. Each window move costs one
new word per timestep, and the other `K-1` positions are reused. A single shared line buffer
would have to reload all `K` positions for every timestep.

While the array is not in compute-in-memory (CIM) mode (`cim_ready` low), the controller stalls.
It issues nothing, and `stall_cycles` counts the stalled cycles of the current layer. So a
layer may be started at the same moment CIM mode is requested.

The compute pipeline after the controller is:

| stage | what happens |
|---|---|
| A | controller picks the micro-op and drives the FM read address |
| B | read data arrives; line buffer shift; wordline register load |
| C | array currents (combinational) reach the neurons; spikes registered |
| D | PWB output buffer |
| E | pooling OR with mp buffer; pooled word into the write buffer |
| F | FM SRAM write |

## Pooling write-back (`pwb`)

Binary max pooling is an OR. Spike vectors leave the neurons in stride-tick order: all
timesteps of position `p`, then all timesteps of `p+1`. The PWB keeps one 128-bit mp buffer per
timestep. When the last position of a window of `pool` positions arrives, the pooled word goes
to the write buffer and then to the FM SRAM, at `out_base + q*ts + t`. Positions left over at
the end, which do not fill a window, are dropped. `pool = 1` writes every vector unchanged.

Pooling therefore happens in the same pass as the convolution, and the next layer can start
as soon as `done` pulses. For comparison, the short cut path MUX lets a `LAYER_POOL_ONLY` pass
read a feature map and pool it without using the array. That is the unpipelined "convolution,
then pooling" flow, and the end-to-end test checks that both flows give identical maps.

## Supply modes and regulation

`supply_sequencer` runs one subbank's mode changes:

- **Data access mode** (`WM_E = CM_E = 0`). The cells run at 0.9 V, and weights can be written.
- **Guard time.** `WM_E` rises, the regulator engages, and `V_ref` falls from 0.9 V. The subbank
  supply stays at 0.9 V meanwhile. The guard time lasts `GUARD_CYCLES` cycles, 64 in the top.
- **CIM mode.** `CM_E` rises and hands `V_ref` to the subbank. The array's bitlines carry
  current only in this mode.

Dropping `cim_req` returns both enables to 0 in one cycle. The array ignores weight writes
while `WM_E` is high, and an assertion flags such a write.

`supply_regulator` is a behavioural model in integer fixed point (µV, pA). A sensor cell draws
`200 nA * exp((V - V0(T)) / (1.5 kT/q))`. `V0` is the supply at which a cell draws 200 nA: it
rises linearly from 219 mV at -20 °C to 330 mV at 100 °C. The error amplifier is a clocked
integrator with a slew limit. It settles from 0.9 V in about 40 cycles and then holds the ten
sensors within 1 % of `I_R` (`locked`). This is enough to exercise the mode sequence and to
show the supply tracking temperature. It is not a circuit model of the amplifier.

The top has 64 of these models, one per subbank. Their results do not feed back into the
array's arithmetic, which assumes a perfectly regulated unit current.

## Files

| file | contents |
|---|---|
| `rtl/cim_pkg.sv` | constants, `layer_cfg_t`, `op_tag_t` |
| `rtl/snn_cim_top.sv` | the accelerator |
| `rtl/stb_ctrl.sv` | stride-tick batching controller |
| `rtl/line_buffer.sv` | one timestep's 1024-bit sliding window |
| `rtl/fm_sram.sv` | feature-map SRAM, 1R1W, synchronous read |
| `rtl/cim_array.sv` | behavioural 8T CIM array (unit-current counts) |
| `rtl/neuron_cell.sv`, `rtl/neuron_array.sv` | behavioural neurons with replica-cell threshold |
| `rtl/pwb.sv` | pooling write-back |
| `rtl/output_accumulator.sv` | final-block membrane sums |
| `rtl/supply_sequencer.sv` | data access / guard / CIM mode sequencing |
| `rtl/supply_regulator.sv` | behavioural monitor + regulator of one subbank |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_snn_cim_top.sv` | end-to-end test, reduced size (64 wordlines, 16 neurons) |
| `tb/tb_snn_cim_full.sv` | the same test with every parameter at its default |
| `tb/tb_gscd_kws.sv` | the keyword-spotting network's seven CIM layers at full size |
| `tb/tb_top_tasks.svh`, `tb/tb_top_body.svh`, `tb/tb_util.svh` | reference model and host tasks, shared test body, check macro |

### Using the top

1. After reset the top is in data access mode. Load input maps through `h_we/h_waddr/h_wdata`.
   Load weight rows through `w_we/w_addr/w_set/w_data`, and thresholds through
   `th_we/th_cells` (neuron `n` at `[5n +: 5]`).
2. Raise `cim_req`. Put a `layer_cfg_t` on `cfg` and pulse `start`. Wait for `done`; `busy` is
   high in between. `n_written` then holds the number of words the layer wrote.
3. Start the next layer, or drop `cim_req` to reload weights, then raise it again.
4. Read results through `h_re/h_raddr`. The data appears on `h_rdata` one cycle later. Host FM
   access only works while `busy` is low.
5. After a layer started with `cfg.accum`, put a neuron number on `acc_sel`. Its membrane sum
   appears on `acc_sum` in the same cycle, and the op count on `acc_ops`.

`cin*ksize` must not exceed 1024, `wset` must be below 5, `ts` must be 1 to 3, and `stride` and
`pool` must be at least 1. Assertions check this at `start`.

## Simulating

From the repository root, with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_snn_cim_top -y rtl -y tb +libext+.sv \
          -Irtl -Itb rtl/cim_pkg.sv tb/tb_snn_cim_top.sv && obj_dir/Vtb_snn_cim_top
```

Replace `tb_snn_cim_top` by any other testbench name. Each testbench prints
`TB_RESULT checks=N failures=M`. `tb_snn_cim_full` builds the full 1024 x 128 design. Building
it takes under a minute, and running it takes under a second. `tb_gscd_kws` runs for about 15 s.

## What the tests establish

- Every module's testbench compares against values computed independently in the testbench.
  These cover unit-current sums from a separate copy of the weights, the membrane equation, OR
  pooling, and the schedule. For the schedule, the testbench tracks which FM word entered
  which line buffer and checks every window at every compute.
- The controller test checks the latency formula above, with and without random stalls, for
  strides 1 to 3, `ts` 1 to 3, and a 128-tap kernel.
- The end-to-end test runs six layers. It checks every written word against a full software
  model of the network layer. It also counts these mechanisms, each of which must occur:
  - a stall during the guard time;
  - both mode switches, and regulator lock;
  - pipelined pooling, and the short cut pass;
  - equality of the pipelined and unpipelined flows;
  - `ts = 1` and `ts = 3`;
  - a spike resetting the membrane inside a timestep group;
  - a weight-set change, a weight reload, and a chained layer;
  - a layer summed in the output accumulator, where every neuron's sum is checked.
- The keyword-spotting test runs the seven CIM layers of the network back to back on the
  full-size design. The shapes are In=8 K=128, In=64 K=16 twice, and four blocks of In=128
  K=8 (64, 64, 128, 128, 128, 128 and 12 outputs). Weights and thresholds are random, because
  the trained values are not available. Five weight sets hold blocks 1 to 5. Sets 0 and 1 are
  reloaded for blocks 6 and 7. Every written word is checked. The last block runs with
  `cfg.accum`, and every neuron's membrane sum is checked. The network diagram gives two
  pooling schedules: pooling sizes 4, 2, 1, 1, 1, 1 in its parameter row, and 4, 2, 2, 2, 2, 2
  in its pooling boxes. Both are run, each with the shortest input that leaves one output
  position (539 and 2115 positions of 3 timesteps). With the pipelined pooling write-back, the
  network takes 2350 and 9220 cycles. With a separate pooling pass after each convolution it
  would take 3864 and 17854 cycles, so pipelining saves 39 % and 48 %. The published figure is
  50 % (9873 to 4945 cycles) at an input length that is not stated.
- Each testbench was also run against a deliberately broken copy of its module, and it failed.

Not modelled: analog non-idealities (cell mismatch, comparator offset and noise), leakage,
the voltage-dependent speed of the array, and the transistor-level amplifier.

## Departures from the described chip, and choices made here

- **Host and layer sequencing.** These are not described. The top runs one layer per `start`
  and exposes plain write ports. The keyword-spotting network's seven CIM layers need more
  weights than five sets hold, so weights are reloaded between layers in data access mode.
- **FM SRAM.** Its size (8192 words, 1 Mb) and its separate read and write ports are choices
  made here. They let convolution reads and pooled writes overlap, as the pipelined pooling
  requires.
- **Micro-schedule.** The read-one-cycle-ahead schedule and the window bit order are this
  design's own. The result is one compute per cycle at stride 1. The reported first-layer
  latencies (about 12,000 cycles) depend on the input length, which is not given. They cannot
  be compared cycle for cycle.
- **mp buffers.** There is one mp buffer per timestep, so that pooling works with
  stride-tick order. The published block diagram draws a single 128-bit mp buffer, which is
  the `ts = 1` case.
- **Bitline organisation.** 1304 bitlines for 128 neurons is read here as five weight sets of
  256 bitlines plus sensor and threshold columns. The neurons are not time-multiplexed across
  column groups. "Shared neuron cells" is taken to mean that one neuron serves whichever weight
  set is selected.
- **Threshold.** Programmability is taken as the count of replica cells that store 1.
- **Pooling sizes.** The network figure prints pool size S = 1 under blocks 3 to 6, but draws
  a 2x max-pool stage in them. Either setting can be configured, since `pool` is per layer.
- **Final accumulator.** One description places the final output layer outside the macro.
  Another says that neuron accumulation runs on the chip. The accumulator is built here as a
  digital adder per neuron, fed with the array's unit counts. The classifier after it, and the
  division for the average, are left to the host.
- **Not built.** The input encoding layer (batch normalization and a 1x1 convolution) runs
  outside this accelerator. Its spikes enter through the FM SRAM. The reference-current generator is an
  analog current mirror, and its current enters as `i_r_na`.
