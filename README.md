# A SOM classifier core for real-time eco-driving assessment

Whether a driver is economical shows up in a few statistics of how they drive. Four of
them track fuel consumption well over an 8 s window: the mean gas-pedal percentage, the
mean engine RPM, the mean gas-pedal pressure and the variance of the positive longitudinal
acceleration. An 11 x 11 self-organising map (SOM), trained offline on recorded drives,
places every such window near one of its 121 neurons. The neurons were then grouped into
five driving-style clusters: very low, low, medium, high and very high consumption. Each
cluster comes with a piece of advice for the driver.

On the car, a processor computes the four features every 4 s. It hands them to the
hardware described here, which returns the cluster of the best-matching neuron. This
hardware is the FPGA part of a processor-plus-FPGA device. It evaluates all 121 neurons in
parallel and returns the answer 12 clock cycles after the start, which is 0.12 µs at
100 MHz. The processor keeps everything else: reading the vehicle buses, windowing,
feature computation, the cluster statistics over time and the advice text.

The RTL is SystemVerilog and is parameterised in the number of features `N`, neurons `M`,
data width `W` and clusters. The defaults are the configuration above: `N = 4`,
`M = 121`, `W = 8`, five clusters.

## What is computed

For a sample `x = (x_1 .. x_N)` and neuron weight vectors `m_i`, the core computes:

```
d_i   = sum_j (x_j - m_ij)^2           for every neuron i = 0 .. M-1   (squared Euclidean)
c     = argmin_i d_i                   (best-matching unit, BMU; first index on ties)
class = CLUSTER_ROM[c]
```

Features and weights are unsigned Q0.8 numbers: 8 bits, all fractional, covering
[0, 1). The processor scales each feature into that range. Every intermediate width is
exact, so nothing overflows or wraps:

| quantity | width | note |
|---|---|---|
| feature, weight | 8 | Q0.8 |
| \|x − m\| | 8 | |
| (x − m)² | 16 | Q0.16 |
| d_i | 18 | 16 + ceil(log2 4) |
| BMU index | 7 | ceil(log2 121) |
| comparer entry | 25 | {d_i, i} |
| cluster | 3 | five classes |

A distance code `D` means `D / 65536`. For example, 231 stands for 0.0035.

## Block structure

```
            +--------------+   x_q   +-----------+ {d_0,0}
 x[N] ----->| input regs   |-------->| neuron 0  |---------+
 launch --+ +--------------+    |    +-----------+         |   +-----------------+  p = {d_c, c}  +-------------+
          |        ^ load       +--->| neuron 1  |---------+-->| recursive tree  |--------------->| cluster ROM |--> cluster
          v        |            |    +-----------+   ...   |   | comparer        |   bmu_dist,    +-------------+
   +------------+  |            +--->| neuron M-1|---------+   | (ceil(M/2) cells)|  bmu_idx
   | controller |--+ ce, ini --------------------------------->+-----------------+
   +------------+--> ready, busy, index
```

| module | role |
|---|---|
| `som_pkg` | default sizes, width helpers, driving-style enum, default map contents |
| `som_input_regs` | one register per feature, loaded by `launch` |
| `som_neuron` | `N` × `som_sqdiff`, then `som_adder_tree`, then the neuron index is appended |
| `som_sqdiff` | the distance module: \|x − w\| in the first cycle, its square in the second |
| `som_adder_tree` | registered binary adder tree, one level per cycle |
| `som_tree_comparer` | finds the BMU with ceil(M/2) compare cells reused over ceil(log2 M) steps |
| `som_cluster_rom` | LUT ROM from BMU index to cluster, forced to 0 in reset |
| `som_controller` | turns `launch` into `load`, the comparer's `ce`/`ini` sequence, and `ready` |
| `som_accelerator` | all of the above |
| `som_axi_lite` | AXI4-Lite register file used by the processor |
| `som_axi_top` | top level: `som_axi_lite` + `som_accelerator` |

Each neuron holds its weights as constants, set by the `WEIGHTS` parameter. Synthesis
folds these constants into the subtractors, so each neuron's weight ROM costs no memory.

## The recursive tree comparer

Finding the minimum of 121 distances would take 120 two-input comparators in a plain
binary tree. This comparer has only ceil(M/2) = 61 compare cells. Each cell has two
input selectors, a `<` comparator, a 2:1 selector and a 25-bit register. The cells are
reused over several clock cycles, and the `ini` signal chooses what they compare:

* **`ini = 0` (load step).** Cell `j` compares neuron outputs `u[2j]` and `u[2j+1]` and
  stores the smaller one. With `M = 121`, cell 60 has no partner, so it compares
  against an all-ones entry.
* **`ini = 1` (fold steps).** Cell `j` compares registers `r[2j]` and `r[2j+1]`. A cell
  whose partners lie past the last register reads all ones. After each step the minima
  sit in the lower half of the registers and the upper half fills with ones.

The number of live entries goes 121 → 61 → 31 → 16 → 8 → 4 → 2 → 1. That is one load
step and six fold steps, or ceil(log2 M) = 7 clock cycles. Register `r[0]` then holds
`{d_c, c}`. Further fold steps leave `r[0]` unchanged, because its partner `r[1]` is
never smaller. The `ce` input freezes all cells.

An all-ones entry never wins. The largest real distance is 4 × 255² = 260100, which is
below 2¹⁸ − 1. The comparison looks only at the distance field. On a tie the cell keeps
its first operand, which holds the lower indices. So the result is always the
lowest-index minimum, the same answer a "first minimum" search in software gives.

Why this works: after step `s`, register `r[j]` holds the minimum of a contiguous run of
2^s inputs, and the runs are in index order. Each fold step merges two neighbouring runs.

When `M` is odd, the last cell's partner is padding in both modes. Lint reports its
comparison as constant (CMPCONST). This is expected, and synthesis removes that
comparator.

## Timing of one classification

Edges are numbered from the one that samples `launch` (edge 0), for `N = 4`, `M = 121`:

| edge | what happens | controller `index` before the edge |
|---|---|---|
| 0 | input registers load `x` | – (idle) |
| 1 | \|x − m\| in all 484 distance modules | 1 |
| 2 | squares | 2 |
| 3 | adder tree level 1 | 3 |
| 4 | adder tree level 2: all `d_i` valid | 4 |
| 5 | comparer load step (`ce = 1`, `ini = 0`) | 5 = ceil(log2 N) + 3 |
| 6 … 11 | six fold steps (`ce = ini = 1`) | 1 … 6 |
| after 11 | `ready = 1`, outputs valid | 7 = ceil(log2 M) |

In general the latency is 3 + ceil(log2 N) + ceil(log2 M) edges, counting the launch
edge. The cluster ROM is combinational, so `cluster` is valid together with `bmu_idx`.
`ready` stays high, and the outputs stay stable, until the next accepted `launch` or a
reset.

Other control rules:

* A `launch` that arrives while the core is busy is ignored.
* `rst` is synchronous and active high. It clears every register, returns the
  controller to idle and forces `cluster` to 0.

## Register interface (`som_axi_top`)

The top level is an AXI4-Lite slave with 32-bit data and an 8-bit byte address:

| address | name | access | contents |
|---|---|---|---|
| 0x00 | CTRL | W | bit 0 = 1 starts a classification |
| 0x04 | STATUS | R | bit 0 ready, bit 1 busy, bits [15:8] controller step counter |
| 0x08 | RESULT | R | bits [7:0] cluster, bits [31:16] BMU index |
| 0x0C | DIST | R | BMU squared distance, in units of 2⁻¹⁶ |
| 0x10 + 4j | FEATj | R/W | feature j in bits [7:0] (j = 0 … N−1; WSTRB honoured) |

Unmapped addresses read as 0. Every response is OKAY.

* **Writes.** A write is accepted when the address and the data are both valid and no
  write response is still waiting. `AWREADY` and `WREADY` are raised together for one
  cycle.
* **Reads.** A read is accepted when no read data is still waiting.
* **Assertions.** The slave checks that a response, once valid, is held until the
  master takes it.

Software sequence per window:

1. Write FEAT0 … FEAT3.
2. Write 1 to CTRL.
3. Poll STATUS until bit 0 is set.
4. Read RESULT and, if wanted, DIST.

A CTRL write reaches the core one cycle after it is accepted. The answer is ready 12
cycles later.

Reset is active high (`rst`). Connect it to the inverse of the AXI `ARESETn`.

## Map contents: read this before using the core

The weights and cluster labels of the trained map were not published. The defaults in
`som_pkg` are therefore **synthetic** placeholders, chosen only so that the hardware is
fully exercised:

```
weight m_ij  = ((i + 1) * (2j + 37) * 73 + 151 j) mod 256        (8-bit code)
cluster(i)   = floor(i * 5 / 121)                                 (contiguous bands 0..4)
```

Cluster codes follow `som_pkg::driving_style_e`: 0 = very low, 1 = low, 2 = medium,
3 = high, 4 = very high consumption.

To deploy a trained map, replace the bodies of `som_pkg::som_weight(i, j)` and
`som_pkg::som_cluster(i, m, k)`. A `case` table generated from the training tool will
do. Nothing else changes. With other contents the core's answers change, but its
structure and timing do not.

A reference run of the original design used the sample
X = (0.62890625, 0.40625, 0.46484375, 0.14453125), or Q0.8 codes (161, 104, 119, 37).
It gave BMU 42, distance 0.0035 and a 2-bit cluster value of 2. The testbenches use this
sample as a stimulus, but only with the trained map could that answer be reproduced.

## How this RTL relates to the published design

These parts follow the published description:

* the block partition
* the squared-distance neurons, with two cycles for the distance and a two-by-two adder
  tree
* the neuron pointer appended to each distance
* the recursive comparer with M/2 cells, `ini`-selected inputs and all-ones padding
* the LUT cluster ROM with an output multiplexer
* the control signal names `rst`, `launch` and `ini`
* the step counter, shown as `index`
* the data format and widths: 18-bit distances, 25-bit comparer entries and a 7-bit ROM
  address
* the 12-cycle latency

These are choices made here, where the description is silent or unclear:

* **Cluster width.** The code is 3 bits, for five clusters. The published schematic and
  waveform show a 2-bit cluster output, which is only enough for the three-cluster
  grouping. Set `N_CLUSTERS = 3`, `CLUSTER_W = 2` for that variant.
* **Where `ini` comes from.** The published schematic shows `ini` as an external input.
  Here an internal controller generates it from `launch`, together with the clock-count
  bookkeeping that the published timing diagram shows.
* **How long `ready` lasts.** `ready` stays high until the next launch. The published
  timing diagram shows a one-cycle pulse, while the published waveform shows it held.
* **Ties in the comparer** go to the lower index. The operand order of the `<` is not
  documented.
* **Comparer cells.** There are ceil(M/2) cells, which is 61 for the odd M = 121. The
  description assumes M is even.
* **Distance stages.** The distance module computes \|x − w\| in its first stage and the
  square in its second.
* **Bus interface.** The AXI4-Lite register map and handshake timing are defined here.
  The original states only that features and results cross an AXI4 bus.
* **Latency accounting.** The comparer's load step counts as the first of its ceil(log2 M)
  steps. This gives the stated total of 3 + ceil(log2 N) + ceil(log2 M) = 12 cycles. A
  step-by-step reading of the original control description would add one more cycle.
* **Map contents.** The contents are synthetic (see above).

Size after generic synthesis of `som_axi_top`: about 11,700 flip-flop bits, most of them
in the 484 distance pipelines and the 121 adder trees. Reported post-implementation figures
for the original FPGA build were 21,107 LUTs and 13,337 flip-flops, with timing closed at
10 ns and about 2.3 ns of slack. These numbers are only roughly comparable.

## Verification

Every module has a self-checking testbench in `tb/`. Each one computes its expected
values independently, with plain integer arithmetic or a linear scan. Each ends by
printing `TB_RESULT checks=N failures=F` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_som_input_regs` | capture on load, hold otherwise, clear on reset |
| `tb_som_sqdiff` | (x − w)² for random and extreme pairs, exactly 2 cycles later |
| `tb_som_adder_tree` | 4-term tree (2 cycles) and 5-term tree with an odd leftover (3 cycles) |
| `tb_som_neuron` | {distance, index} of a neuron, 4 cycles after the sample |
| `tb_som_tree_comparer` | M = 121 and M = 6: random vectors, many-way ties, all equal, all maximal, minimum in the last slot, exact step count, hold with `ce = 0`, reset |
| `tb_som_cluster_rom` | all 128 addresses, reset forcing |
| `tb_som_controller` | `load`/`ce`/`ini`/`ready`/`index` cycle by cycle, 12-edge latency, launch while busy, reset mid-run |
| `tb_som_accelerator` | full-size core against a software model: BMU, distance, cluster, 12-cycle latency, for the reference sample, exact neuron matches, corners and random samples |
| `tb_som_axi_lite` | register map, byte strobes, single launch pulse, held responses under back-pressure |
| `tb_som_axi_top` | end to end over AXI at full size, with counts of each mechanism: busy polls, ignored launches, a mid-run reset, byte-masked writes, zero-distance matches, slow masters and all five clusters |

`tb_som_drive_session` runs the way the core is used on the road. It plays one driver's
292 s evaluation period: 72 overlapping 8 s windows of synthetic feature traces. It builds
the cluster distribution and the dominant cluster for 8 s, 60 s and 292 s of driving, and
checks every window and every dominant cluster against the reference model.

Simulate any of them with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
          rtl/som_pkg.sv tb/tb_som_axi_top.sv --top-module tb_som_axi_top
./obj_dir/Vtb_som_axi_top
```

Each testbench runs in well under a second at the default sizes. To use another map
size, override `M` (and `N`, `W`, `N_CLUSTERS`, `CLUSTER_W`) on `som_accelerator` or
`som_axi_top`. The widths follow automatically. The testbenches' reference models are
written for the defaults.

Not covered by this RTL: the processor software. That covers vehicle I/O, the 256-sample
windows with 50 % overlap, feature computation, the cluster histogram over an evaluation
period and the advice text. The offline SOM training and clustering are not covered
either.
