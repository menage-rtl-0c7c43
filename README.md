# MENAGE: an event-driven mixed-signal spiking accelerator in SystemVerilog

MENAGE runs a feed-forward spiking neural network (leaky integrate-and-fire
neurons, rate-coded spikes) one layer per core. Two ideas carry the design:

* **Analog compute next to memory.** A synapse is an SRAM row of an 8-bit weight
  whose bitlines switch a C-2C capacitor ladder; the ladder scales an input pulse
  by the weight. A neuron is an op-amp integrator followed by a comparator.
* **Virtual neurons.** Spiking traffic is sparse, so one physical neuron engine
  (A-Neuron) serves N model neurons. Each has its own storage capacitor. For every
  pulse the right capacitor is switched onto the integrator, charged, and switched
  off again. An offline mapper decides which model neuron lives on which
  capacitor of which engine. It writes that decision into small tables that the
  digital controller follows. The controller is "memory-based": it runs from
  tables, not from hard-wired layer logic, so one core serves dense and pruned
  layers alike.

This repository holds the digital part as synthesizable RTL. The two analog
engines are modelled as integer-exact behavioural blocks with the same ports.

## Block structure

```
 camera events ──► core 0 ──► core 1 ──► … ──► core NUM_CORES-1 ──► output events
                    │
   ┌────────────────┴──────────────────────────────────────────────────────────┐
   │ mx_neuracore                                                               │
   │  in ─► mem_e ─► event_controller ─► mem_e2a ─┐                             │
   │                  │   ▲                       │ {B,A}                       │
   │                  │   └───────────────────────┘                             │
   │                  └──► mem_sn ─► pulse_generator ─┬─► a_syn[0] ─► a_neuron[0] ─┐ │
   │                                                 ⋮                          ⋮ ├─► event_generator ─► out
   │                                                 └─► a_syn[M-1]─► a_neuron[M-1]┘ │
   └────────────────────────────────────────────────────────────────────────────┘
```

| file | role |
|---|---|
| `rtl/menage_pkg.sv` | configuration-select and controller-state enums |
| `rtl/menage_top.sv` | chain of `NUM_CORES` cores joined by valid/ready links |
| `rtl/mx_neuracore.sv` | one layer engine, wiring and configuration decode |
| `rtl/mem_e.sv` | event memory: FIFO of incoming events |
| `rtl/event_controller.sv` | controller FSM: poll, look up, dispatch rows, leak, forward step marker |
| `rtl/mem_e2a.sv` | event-to-address table `{B_i, A_i}` per source neuron |
| `rtl/mem_sn.sv` | synapse-and-neuron assignment rows |
| `rtl/pulse_generator.sv` | one row in, up to M lane pulses out |
| `rtl/a_syn.sv` | weight SRAM plus ladder, one per lane |
| `rtl/c2c_ladder.sv` | behavioural ladder multiplier |
| `rtl/a_neuron.sv` | behavioural LIF engine with N capacitors |
| `rtl/event_generator.sv`, `rtl/spike_fifo.sv` | spike queues, arbiter, slot-to-neuron table |

## How an event is distributed (the part to understand first)

An input event is the index `N_i` of a neuron in the previous layer. The core
must deliver a weighted pulse to every destination neuron that `N_i` connects
to, and those neurons sit on arbitrary capacitors of arbitrary engines. Two
tables do the job:

1. **MEM_E2A**, addressed by `N_i`. It returns `B_i` (high bits), the number of
   rows that describe `N_i`'s connections, and `A_i` (low bits), the first of
   those rows.
2. **MEM_S&N**, rows `A_i … A_i+B_i-1`. A row has three column groups, one
   column per engine `j = 0..M-1`:
   * `NI_j` (1 bit): engine `j` gets a pulse from this row;
   * `VNI_j` (log2 N bits): which capacitor of engine `j`;
   * `WI_j` (log2 K bits): which row of engine `j`'s weight SRAM.

One row can therefore update up to M neurons in parallel, one per engine. A
source neuron that reaches more than M destinations, or two destinations on the
same engine, needs more rows. Each row costs one cycle.

Packing of a MEM_S&N word (`ROW_W = M + M·log2N + M·log2K` bits, 520 at the
defaults): bits `[M-1:0]` hold `NI`; then `M` fields of `VNI`; then `M` fields
of `WI`. Lane 0 is at the low end of each group. A MEM_E2A word is
`{B[B_W-1:0], A[A_W-1:0]}`.

### Controller timing

The controller polls the head of MEM_E every cycle. For a neuron event it:

| cycle | action |
|---|---|
| 0 | pop MEM_E, read MEM_E2A at `N_i` |
| 1 | `{B_i, A_i}` arrive |
| 2 … B_i+1 | read one MEM_S&N row per cycle |

It fetches no new event before the last row has been read, so an event takes
`B_i + 2` cycles (2 if `B_i = 0`). A row read in cycle `t` moves down the lanes:

| cycle | stage |
|---|---|
| t+1 | row word out of MEM_S&N |
| t+2 | lane pulses out of the pulse generator |
| t+3 | weight read, ladder output |
| end of t+3 | capacitors updated |
| t+4 | spike registered |
| t+5 | earliest output event |

So the first output event appears 7 cycles after the pop.

### Time steps and leak

A time step ends with an in-band **step marker**: an entry whose top bit is 1.
It travels through the same FIFOs as the events. When the controller pops a
marker, it:

1. waits until no pulse is in flight;
2. gives a one-cycle `leak` command, and every capacitor of every engine loses
   1/8 of its charge (`v -= v >> LEAK_SHIFT`);
3. waits until the event generator has sent all spikes of the step;
4. has it send the marker to the next core.

Each layer therefore sees exactly the spikes of the step before its own leak.

### Back-pressure

Each engine has an 8-deep spike queue. A fixed-priority arbiter (lowest engine
first) sends one output event per cycle. While any queue is occupied, the
controller stops reading rows. At most five rows are then still in flight, so a
queue never overflows; an assertion checks this. When the next core's MEM_E is
full, the queues fill, this core stops, its own MEM_E fills, and the
back-pressure reaches the camera input.

### Output event index and capacitor reassignment

An output event must name the neuron that fired, not the capacitor. The event
generator holds a slot table: slot `j·N + k` (engine `j`, capacitor `k`) maps to
the neuron index stored there. Writing a slot also empties that capacitor, which
is how the mapping hands a capacitor to a new neuron.

## Analog models

* `c2c_ladder`: `vout = (vref · w) >> 8`. This is the ladder equation
  `V_out = V_ref · Σ W_i 2^(i-n)` on integer codes, truncated. Code 255 stands
  for the 0.8 V pulse height. Weights are unsigned, as in the ladder equation.
* `a_neuron`: `N` capacitors of `MEM_W` = 12 bits. A pulse adds the ladder
  output, saturating at the top of the range. When the result reaches `vth` the
  engine fires and resets the capacitor to 0. The default threshold is 112:
  the published circuit swings from 0.8 V at rest to a 0.45 V threshold, and
  0.35/0.8 · 255 ≈ 112. That circuit's integrator is inverting (its output falls
  towards the threshold); the model counts upwards instead.

The analog engine settles in about 6.7 ns, less than one cycle at the reported
103.2 MHz clock. The model therefore gives a spike one cycle after its pulse.

## Parameters

Defaults are the larger published configuration. That one has 5 cores, 20
engines of 32 virtual neurons, and 20 MB of weights per core, which is 1 MiB
(`K` = 1,048,576 rows) per synapse engine.

| parameter | default | meaning | from |
|---|---|---|---|
| `NUM_CORES` | 5 | cores (layers) | published |
| `M` | 20 | A-Syn/A-Neuron lanes per core | published |
| `N` | 32 | virtual neurons per A-Neuron | published |
| `K` | 1048576 | weight rows per A-Syn | published (20 MB / 20) |
| `WB` | 8 | weight bits | published |
| `EVT_W` | 16 | neuron index bits | chosen |
| `E2A_DEPTH` | 65536 | MEM_E2A rows | chosen, above the 32,768 inputs of a 128×128×2 sensor |
| `SN_DEPTH` | 1048576 | MEM_S&N rows | chosen (= K) |
| `MEME_DEPTH` | 256 | event FIFO entries | chosen |
| `B_W` | 8 | bits of B_i | chosen |
| `MEM_W`, `LEAK_SHIFT`, `VTH_INIT`, `VREF` | 12, 3, 112, 255 | neuron model | chosen |

The smaller published configuration is
`NUM_CORES=4, M=10, N=16, K=40960, SN_DEPTH=40960`.

## Configuration

All tables are written through one port. `cfg_core` selects the core;
`cfg_sel` selects the target (`menage_pkg::cfg_sel_e`):

| `cfg_sel` | effect |
|---|---|
| `CFG_E2A` | MEM_E2A row `cfg_addr` ← `{B, A}` |
| `CFG_SN` | MEM_S&N row `cfg_addr` ← packed row |
| `CFG_WEIGHT` | weight row `cfg_addr` of lane `cfg_idx` ← `cfg_wdata[7:0]` |
| `CFG_SLOT` | slot `cfg_addr` ← neuron index; clears that capacitor |
| `CFG_VTH` | core threshold |

Events are `{marker, index}` on `in_*` / `out_*` with valid/ready handshakes.

## Where this RTL departs from the published design, or fills gaps

* The published design names the pulse generator and the event generator but
  does not describe their insides. The register stage, the spike queues, the
  arbiter, the slot table and the stall rule are all choices made here.
* The step marker, the leak fraction (1/8), V_reset = 0, the field widths, the
  table depths, the packing order and the configuration port are also choices
  made here.
* Weights are unsigned, so a synapse cannot inhibit. Signed weights would need a
  second ladder polarity, which is not described.
* The published mapper may reassign capacitors within a time step. Here that
  means rewriting the slot table and MEM_S&N rows between groups of events. No
  hardware sequencer does it.
* Deciding the output class from the output spikes is left to the host.
* Energy, area and the 103.2 MHz clock are properties of the published
  silicon and analog design. This RTL does not reproduce them.

## Fitting networks

* **N-MNIST multilayer perceptron, 2312-200-100-40-10.** It fits the defaults:
  * 4 weight layers on 5 cores;
  * at most 462,400 weights per layer, against 21 M weight rows per core;
  * at most 200 neurons per layer, against 640 capacitors per core.
* **CIFAR10-DVS multilayer perceptron, 32768-1000-500-200-100-10.** It fits only
  under two conditions:
  * The first layer has 32.8 M weights before pruning. It must lose at least 36%
    of them to fit 21 M rows.
  * Its 1000 neurons exceed 640 capacitors, so capacitors must be reassigned
    within a step.

## Simulation

Each testbench checks itself and ends by printing `TB_RESULT checks=… failures=…`.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/menage_pkg.sv \
    $(ls rtl/*.sv | grep -v menage_pkg) tb/tb_menage_top.sv \
    --top-module tb_menage_top -o sim && ./obj_dir/sim
```

The package goes first because the other files import it.

* `tb_<block>`: one per block. Each checks against a model in the testbench.
  Where a latency is defined, it checks the cycle counts.
* `tb_menage_top`: a reduced chain (3 cores, 4×4 lanes). It has a random network
  and 12 time steps with random output back-pressure. An LIF reference
  recomputes every core's output per step; within a step it compares them as
  multisets, because the arbiter may reorder spikes from different engines. It
  also fails if any of these never happened: multi-row dispatch, an event with
  no rows, firing, leak, stall, a full event memory, saturation, output
  back-pressure.
* `tb_menage_full`: the same flow on the top at its default size, with memories
  sparsely programmed. It runs in about one minute and needs about 450 MB.
* `tb_workload_nmnist`: a network with the N-MNIST shape 2312-200-100-40-10
  (10% of connections kept, random weights; no trained model or data) mapped
  onto four cores of default size. Neuron `n` of a layer sits on engine
  `n mod 20`, capacitor `n div 20`. Each source neuron gets as many MEM_S&N rows
  as its busiest engine needs. The layer-1 table comes to about 7,000 rows. Four
  time steps are checked against the LIF reference as above.

No test covers the CIFAR10-DVS shape. Its 1000-neuron layer needs capacitor
reassignment within a step, and no host sequencer for that exists here.
