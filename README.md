# POPPINS — a population-based digital spiking neuromorphic processor

Small spiking networks taken from insect neuroscience (tens to a few hundred
neurons) are organised as *populations*: groups of neurons in which every
neuron has an input from outside, a connection to itself, and a connection to
every other neuron of the group. POPPINS is a digital processor built around
that structure. It holds two populations in two neuromorphic processing units
(NPUs):

| unit | population neurons | global neuron | weight memory |
|------|-------------------:|--------------:|--------------:|
| NPU1 | 32                 | 1             | 8 Kb          |
| NPU2 | 128                | 1             | 128 Kb        |

Spikes of NPU1 are also fed to NPU2 one time step later (a one-way
"hierarchy"), so NPU2's neurons see 32 extra presynaptic inputs. The neurons are
integer quadratic integrate-and-fire (I-QIF) neurons with an 8-bit unsigned
membrane. The synapses carry signed 4-bit weights into signed 8-bit synaptic
registers, which decay by a shift-based "reciprocal" rule.

The processor avoids a physical crossbar. A spike does not fan out in parallel
to all N targets. Instead, a spike decoder walks through the previous step's
spikes two at a time, and each spike reads its weights from SRAM eight at a time
(one 32-bit word). Those eight weights are added in parallel into eight of the
synaptic registers. Per-row *group-sparse codes* let a spike skip the 8-neuron
groups it has no weights for, so sparse networks run faster.

This repository holds synthesizable SystemVerilog for the whole digital design,
with a self-checking testbench for each module and an end-to-end testbench of
the full-size processor against a behavioural reference model. The structure,
sizes and arithmetic come from the published description of the chip. Many
details that description leaves open, such as the host protocol and row map,
are this implementation's own choices. They are all listed in
[Departures and own choices](#departures-and-own-choices).

## The I-QIF neuron (`iqif_neuron`)

A quadratic integrate-and-fire neuron has dV/dt ∝ (V − V_r)(V − V_t): below a
middle point it relaxes towards rest, above it it runs away towards a spike. The
I-QIF neuron replaces the parabola with two straight lines and uses integers only:

```
dV = a·(V_r − V)  + I     if V <  V_pde
dV = b·(V − V_t)  + I     if V >= V_pde
V' = V + dV;  if V' > 255: spike, V' = V_reset;  if V' < 0: V' = 0
```

* `V` is 8-bit unsigned. It is held together with an overflow (spike) flag in a
  9-bit register.
* `a`, `b` are 3-bit codes meaning code/8 (0 … 7/8). The product is computed as
  `(code × difference) >>> 3`, which rounds towards −∞.
* `V_pde` should be (a·V_r + b·V_t)/(a+b), the point where the two lines meet.
  The host computes it and writes it as a parameter.
* `I` is the 9-bit signed sum of the neuron's synaptic register and its external
  stimulus.
* The spike flag is the register's overflow bit. It stays valid until the next
  update.

All neurons of one NPU share one parameter set (`iqif_par_t`).

## Synapses and the reciprocal decay (`postsyn_core`, `reciprocal_decay`)

Each neuron lane of an NPU has one signed 8-bit synaptic register. Arriving
weights (signed 4-bit, −8 … +7) are added with saturation at −128/+127.

Decay multiplies by (2^α − 1)/2^α, done as `y − (y >>> α)`. For small `|y|` the
shift gives 0 and the value would get stuck ("decay fatigue"). The decay unit
then subtracts a minimum step of +1 or −1 instead, chosen by the sign bit, so
every value reaches 0:

```
s  = y >>> α
y' = y − (s == 0 ? sign(y) : s)        (y = 0 stays 0)
```

Decay is applied to the active lanes in every (decay_period+1)-th time step. An
operation counter in the population controller keeps track of this.

## The virtualized crossbar (`pop_controller`, `spike_decoder`, `weight_sram`, `gs_weight_arrange`)

This is the heart of the design and the least obvious part.

**Presynaptic rows.** Every source of spikes into an NPU has a *row*, meaning a
list of M weights, one per target neuron:

| rows | source |
|------|--------|
| 0 … M−1 | the NPU's own neurons (recurrent and self connections) |
| M … M+H−1 | NPU1's neurons, forwarded to NPU2 (H = 32; NPU1 has none) |
| 2M−1 | the NPU's global neuron |

The weight memory has 2M rows. M/8 words make up one row. Word `row·(M/8) + g`
holds the weights from `row` to neurons 8g … 8g+7. Weight k sits in bits
[4k+3:4k]. This gives 64 × 4 words (8 Kb) for NPU1 and 256 × 16 words (128 Kb)
for NPU2.

**Group-sparse codes.** A register file next to the controller holds one bit per
(row, group). Bit g means "group g of this row has non-zero weights". At reset
every bit is 1. When a spike from a row is served, the controller reads only the
words whose bit is set, and only for groups that contain active neurons. It
reads one word per clock, so the spike costs GS_num = popcount cycles (at least
one). Zero groups are never read.

**Spike decoder.** The previous step's spikes are loaded into a circular shift
register. Each clock the decoder looks at the two lowest bits:

* If both are 0, it rotates by two in a single cycle.
* If one or both are set, it presents each spike's index to the controller, in
  turn. It holds that index until the controller has issued the spike's last
  read.

Scanning s bits therefore costs ⌈s/2⌉ cycles plus the extra MAC-cycles of the
spikes found.

**Arrangement and accumulation.** The SRAM returns the word one cycle after the
read. `gs_weight_arrange` steers its eight weights to lanes 8g … 8g+7, which add
them in the same cycle. Weights from one row reach a lane in row order. This
matters only when the register saturates.

**Serving order in a time step.** The order is:

1. The global neuron's spike, if any.
2. The own population's spikes, or in chopped mode sub-population #1 and then
   sub-population #2.
3. NPU2 only: the forwarded NPU1 spikes.

`acc_done` follows two cycles after the last read. Scanning a stream of s bits
costs one cycle per 2-bit window. A window that holds spikes costs instead the
sum of max(1, GS_num) over its spikes. The exact count is checked by
`tb_pop_controller`.

## Populations: size, chopping, global neuron, hierarchy

* **Active size.** Only 2^n neurons (counting from 0) are active
  (`act_log2`). Inactive neurons are not scanned, not updated and receive
  nothing. Smaller populations therefore run in fewer cycles.
* **Half-hierarchy-chopped population** (`chop_en`). The NPU is split in two
  halves. Sub-population #1 has 2^sub1_log2 neurons from 0, and sub-population
  #2 has 2^sub2_log2 neurons from M/2. Own-population spikes then only address
  sub-population #2's groups. Connections become one-way #1 → #2, plus #2 ↔ #2,
  and about half of the SRAM reads are saved. Sub-population #1 still gets
  external, global and (NPU2) hierarchy input.
* **Global neuron.** Each NPU has one extra I-QIF neuron (index M) with its own
  weight row to all active neurons. It can act as a global excitatory or
  inhibitory path. Its only input is its external stimulus.
* **Hierarchy.** `hier_scheduler` stores NPU1's spikes at the end of each step.
  During the next step NPU2 scans them as rows M … M+31. `hier_en` (NPU2
  parameter) cuts the path.

## One time step (`top_controller`, `npu`)

A run command starts n time steps. Each step is the following sequence of
one-cycle phases:

| phase | action |
|-------|--------|
| external input | stimuli written by the host are copied into the Cur registers |
| accumulation | both NPUs serve their spikes in parallel; wait for both `acc_done` |
| decay | decay the synaptic registers (if this is a decay step) |
| neuron update | all active neurons of both NPUs update at once |
| capture | the new spikes go to the spike stream buffers and the hierarchy scheduler |
| output | the spikes of both NPUs go to the output stream buffer; the step stalls here while the host has not taken the previous one |

A step takes 6 cycles plus the slower NPU's accumulation. At full size NPU2
alone needs about 90 cycles per step with no spikes: 64 windows for its own
population, 16 for the hierarchy input, and overhead. The end-to-end test
averages about 150 cycles per step with a few spikes per step. A spike written
as a stimulus during a run takes effect at the next step boundary.

## Host interface

All configuration, weights and stimuli arrive as `host_cmd_t` words (valid/ready,
through an 8-deep FIFO):

| op | addr | data |
|----|------|------|
| `CMD_W_WEIGHT` | SRAM word address (row·M/8 + group) | 8 weights |
| `CMD_W_GS` | row | group-sparse code, bit g = group g |
| `CMD_W_EXT` | neuron (M = global neuron) | signed 8-bit stimulus |
| `CMD_W_PAR` | parameter index `PAR_*` | value (see `poppins_pkg`) |
| `CMD_RUN` | – | number of time steps |
| `CMD_CLEAR` | – | clear synapses, membranes (to V_r), spikes, stimuli |

The `npu` bit selects NPU1 or NPU2. While a run is in progress only stimulus
writes are taken. Other commands wait in the FIFO until the run ends. Each
step produces one output word: `out_spk1` (33 bits), `out_spk2` (129 bits; the
top bit is the global neuron) and `out_step`, with valid/ready.

Reset configuration: all neurons active, not chopped, hierarchy on, α = 2,
decay every step, a = b = 2/8, V_r = 40, V_t = 120, V_reset = 40, V_pde = 80.

## Module map

| file | role |
|------|------|
| `poppins_pkg.sv` | sizes, parameter and configuration structs, command format |
| `poppins_top.sv` | the processor: FIFO, setting decoder, controller, two NPUs, scheduler, output |
| `input_stream_buffer.sv` | host command FIFO |
| `set_arrange.sv` | command decoder and configuration registers of both NPUs |
| `top_controller.sv` | time-step sequencer |
| `hier_scheduler.sv` | NPU1 → NPU2 spike forwarding |
| `output_stream_buffer.sv` | per-step output word |
| `npu.sv` | one population unit |
| `pop_controller.sv` | serving order, group-sparse register file, SRAM reads, active set, decay counter |
| `spike_decoder.sv` | 2-bit-per-clock circular spike scan |
| `weight_sram.sv` | weight memory (array; a foundry SRAM on silicon) |
| `gs_weight_arrange.sv` | word-to-lane steering |
| `postsyn_core.sv` | synaptic registers, accumulators, decay units, Syn+Cur |
| `reciprocal_decay.sv` | one decay unit |
| `ext_input_buf.sv` | stimulus buffer |
| `neuron_cluster.sv`, `iqif_neuron.sv` | the neurons |
| `spike_stream_buf.sv` | spike register between steps |

`tb/poppins_ref_pkg.sv` is an integer reference model of a whole NPU time step.
The testbenches use it. It is the quickest way to see the intended behaviour in
one place.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=F` and stops. To build and
run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/poppins_pkg.sv tb/poppins_ref_pkg.sv tb/tb_poppins_top.sv \
    --top-module tb_poppins_top -o sim
./obj_dir/sim
```

Replace `tb_poppins_top` by any other `tb_*` module. `tb_poppins_top` runs the
processor at full size (no parameter overrides), driven only through the host
port. It loads every weight and group-sparse code of both NPUs, then does four
runs:

* the default configuration;
* NPU2 chopped, with a smaller NPU1 and a slower decay;
* the hierarchy path off, with a smaller NPU2;
* a run after a clear.

Each output word, and every membrane, is compared with the reference model. It
counts, and requires, spikes, global-neuron spikes, hierarchy events,
group-sparse skips, chopped steps, decay steps, the ±1 minimum decay, output
stalls and host back-pressure. It takes well under a minute to build and run.
`tb_decision` runs the 8-neuron decision-making network (see below).

## Workloads

The chip was evaluated on the following workloads. All of them fit the default
sizes:

* Sudoku solving: N³ neurons and N⁶ synapses for N×N puzzles, N = 2 … 5. 4×4
  Sudoku uses 64 neurons on NPU2 at 50 % sparsity. 5×5 uses 125 of NPU2's 128
  neurons and 15 625 of its 16 384 recurrent weights.
* An 8-neuron decision network on NPU1 that picks one of eight avoidance
  motions.
* The five firing patterns of a single neuron.

The published speed for the decision task is 29.4 k decisions/s at 100 MHz with
50 steps per decision, about 68 clock cycles per step. In this RTL a step with 8
neurons in NPU1 takes 6 cycles plus the slower NPU's accumulation. So NPU2 must
also be shrunk (`act_log2` = 0) and its hierarchy input switched off to reach a
comparable step time. The Sudoku network's exact weights are not published, so
no Sudoku testbench is given.

## Departures and own choices

What follows the published design:

* the unit sizes, the memory sizes and the 32-bit SRAM word of eight signed
  4-bit weights;
* the 8-bit membrane and the 3-bit a/b;
* the I-QIF equations;
* the 8-bit synaptic register, the 8-bit Cur and the 9-bit neuron input;
* the reciprocal decay with its ±1 minimum;
* the spike decoder checking two bits per clock with a circular shift;
* group-sparse codes in groups of 8, with MAC-cycles set by GS_num;
* 2^n active neurons and the half-chopped population with one-way paths;
* one global neuron per NPU;
* one-way NPU1 → NPU2 forwarding one step later;
* the order of phases in a time step.

Own choices, where the description is silent:

* the host command format, the register map, the FIFO depth and the
  single-entry output buffer;
* the row map of the weight memory and the bit order within a word;
* one group-sparse code per row, held in registers;
* in chopped mode, sub-population #2 is the one receiving the recurrent input;
* the global neuron is driven only by its external stimulus. The published
  synapse count, 17.73 k = 33² + 129², suggests that on the chip the global
  neuron also receives weighted input from its population. That is not built
  here;
* the external stimulus enters each neuron as a separate current added to the
  synaptic value (Syn + Cur). It is not accumulated into the synaptic register;
* one shared neuron parameter set per NPU;
* V_pde is written by the host rather than computed on chip;
* rounding towards −∞, and a membrane clamped at 0;
* saturating synaptic accumulation;
* 0 does not decay;
* a decay-period register drives the "operation counter";
* stimuli are latched at each step start and persist until rewritten;
* reset values.

Not built:

* the pad ring, which has no logic function;
* the image-sensor and optical-flow front end of the decision task, which sits
  outside the chip.

The weight memories are plain arrays. On silicon they are foundry SRAM macros.

The published energy, power, area and speed figures are properties of the
fabricated chip and are not reproduced here. The step timing above is this
implementation's own.
