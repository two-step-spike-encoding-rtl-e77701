# A spiking-neural-network core with two-step spike encoding

Spiking neural networks (SNNs) pay for every spike, so the cheapest SNN is the
one that needs the fewest spikes for the same accuracy. This core implements
the encoding and processing scheme of *"Two-Step Spike Encoding Scheme and
Architecture for Highly Sparse Spiking-Neural-Network"* (Kim et al.). Its idea
is to split encoding in two:

* **Source encoding** decides *which* spikes exist. A value is turned into a
  deterministic spike train by superposing one fixed "eigen-train" per set bit
  (no random-number generator, no information lost in the low bits).
  *Sparsity boosting* (SB) first removes low-order bits that matter little
  next to large high-order bits, and *spike generation skipping* (SGS) drops
  neurons whose inputs are so quiet that they would not fire anyway.
* **Process encoding** decides *how* the spikes are processed. *Delayed
  thresholding* (DT) lets a weight stay in the PE for many time steps, then
  thresholds once. *Time-shrinking multi-level encoding* (TS-MLE) packs eight
  binary time steps into one or two small integer "levels", and *spike-level
  clock skipping* (SLCS) spends only as many cycles on a level as the largest
  level actually present.

The RTL here is a single SNN core that runs one convolution layer at a time:
input memory, spike generator, a 4 x 8 PE array, a thresholding unit and an
output memory, sequenced by a controller. It is written in synthesizable
SystemVerilog; every module has a self-checking testbench.

## Dataflow of one layer

```
 IMEM ──4 values──► SB ─► val regs ─► superposition (8 ETGs + OR) ─► TS-MLE ─► SLCS ─► PE rows
   │                                         per row, 8 time steps/cycle               │
   └──► SGS prediction ──► skipping map ──► row enables                 WMEM ─► PE columns
                                                                                        │
                                          OMEM ◄── counts ◄── thresholding (÷ θ_DT, +count)
```

* **Rows are output positions, columns are output channels.** Row `r`
  computes output pixel `(oy, ox0 + r)`; column `c` computes output channel
  `cg*8 + c`. One weight word from WMEM (8 weights, one per column) is shared
  by all four rows, and one spike stream is shared by the eight columns of its
  row.
* Per output row group (4 positions) the controller walks the loop nest

  ```
  for tb in 0 .. TW/D-1                 # delayed-thresholding intervals
      clear PSUM
      for ci, ky, kx                    # kernel taps, one weight fetch each
          read 4 inputs + 1 weight word
          for j in 0 .. D/8-1           # the weight is reused for all D steps
              generate 8 steps per row -> TS-MLE -> SLCS -> PEs
      PSUM / θ_DT  -> add to spike counters (one PE row per cycle)
  write the 4 x 8 counts to OMEM
  ```

  The time loop is innermost, which is what gives weight reuse: each weight is
  read once per interval instead of once per time step.
* Outputs are spike *counts* over the time window, saturated to 8 bits. They
  are exactly the kind of value the next layer's spike generator takes as
  input, so a layer's OMEM contents can be loaded as the next layer's IMEM
  ("count, then re-encode" at every layer, which compresses the traffic
  between layers).

## Eigen-trains and superposition

With m-bit data the time window is `2**m` steps. Bit `n` owns an eigen-train
with `2**n` spikes and period `P = 2**(m-n)`. This design places the spikes
of bit `n` on the steps `t` with `t mod P == P/2 - 1`:

| bit | period | spike steps (m = 4, window 16) |
|-----|--------|---------------------------------|
| 3   | 2      | 0 2 4 6 8 10 12 14             |
| 2   | 4      | 1 5 9 13                        |
| 1   | 8      | 3 11                            |
| 0   | 16     | 7                               |

Equivalently: step `t` belongs to bit `m-1-k`, where `k` is the number of
trailing ones of `t`. No two bits share a step, so OR-ing the trains of the
set bits gives exactly `v` spikes for value `v`, spread evenly over the window
(step `2**m - 1` is never used). The testbenches check the hardware against
this trailing-ones form, which is written independently of the period form
the RTL uses.

`etg` is one eigen-train generator: 8 one-bit registers holding 8 consecutive
steps of its train, masked by the input bit. `superposition_unit` has eight of
them and ORs their outputs, so it produces 8 time steps of the final train per
cycle. For periods longer than 8 steps only one 8-step block in `P/8` holds a
spike; a small block-mask/select register pair in the ETG picks that block
from the block index. The registers are loaded by a one-cycle `init` at the
start of every layer, because `m` is a run-time setting (`cfg.tw_log2`, 3..8):
the same 8-bit generator serves windows of 8 to 256 steps, for example 16 for
the CIFAR-10 setting and 64 for the CIFAR-100 and ImageNet settings of the
paper.

## Sparsity boosting

`sb_unit` looks at the value in 2-bit tiles. For every tile below bit `m/2`
(tile index `bp < m/4`):

* if the tile two places up is non-zero, the tile becomes `00`;
* otherwise, if the next tile up is non-zero, the tile is shifted right by one
  (`11 -> 01`, `10 -> 01`, `01 -> 00`).

Decisions use the original value. Example (m = 8): `0x17 = 00 01 01 11` ->
tile 0 is cleared (tile 2 is `01`), tile 1 is halved (tile 2 is non-zero,
tile 3 is zero) -> `0x10`. Since each one-bit becomes spikes, fewer low bits
means fewer spikes. The paper's prose and its pseudo code disagree on the
halving test (prose: upper tile non-zero; pseudo code: `== 0`); this design
follows the prose. The paper's illustration suggests a magnitude-based rule
(keep six bits below the leading tile); the prose rule implemented here looks
only at the two tiles directly above, and the two can differ when those tiles
are zero.

## Spike generation skipping

Neurons that will not fire tend to receive few input spikes. Before
processing, the controller makes a prediction pass: for each output position
it sums the input counts over the receptive field (`cin x k x k` values) and
`sgs_unit` writes a flag into the skipping map when

```
sum < sgs_th * (cin * k * k)        # average count below sgs_th
```

During processing the flags of the four positions of a row group are looked
up; flagged rows issue no IMEM request, generate no spikes and end with a count
of zero. A group whose four rows are all flagged costs one lookup cycle plus
the write-back. The map holds one flag per output position (all channels
share it) and is cleared by reset.

## TS-MLE and spike-level clock skipping

`tsmle_encoder` turns 8 binary steps into 2-bit levels:

| spikes in the 8 steps                   | slots | each slot covers |
|-----------------------------------------|-------|------------------|
| 0..3 (sparse)                           | 1     | 8 steps          |
| more, but each half 0..3 (dense)        | 2     | 4 steps          |
| a half with 4 spikes                    | 4     | 2 steps          |

The first two rows are the paper's; the four-slot case is this design's, for
trains dense enough to overflow a 2-bit level. Because the weight is the same
for the whole 8-step block, a PE needs only the total, so each slot simply
tells the PE how many times to add its weight.

`slcs_unit` plays the slots of all four rows together. A slot lasts as many
cycles as the *largest* level among the rows, not the maximum possible 3; in
cycle `c` of a slot row `r` adds its weight when `level[r] > c`. An all-zero
slot takes no cycle. For the sparse trains that eigen-train encoding produces,
most blocks cost 0 or 1 PE cycles instead of 8.

## Delayed thresholding

The PSUM of each PE collects `weight x spikes` over an interval of
`D = 8 << cfg.dt_log2` steps (8 to 256, at most the window). At the end of the
interval `thres_unit` divides each PSUM by `θ_DT` (`cfg.thres`) and adds the
quotient to the neuron's spike counter: a membrane that crossed the threshold
three times in the interval fires three spikes at once. Negative PSUMs give no
spikes; the remainder is dropped because PSUM restarts from zero in the next
interval. `θ_DT` plays the role of `D x θ` of a conventional SNN and is a
trained hyper-parameter, so it is simply a register here. The unit has 8
dividers and processes one PE row per cycle.

## Configuration and host interface

The host loads IMEM and WMEM, sets `cfg` (`snn_pkg::cfg_t`), pulses `start`,
waits for `done` and reads OMEM.

| field       | meaning                                                      |
|-------------|--------------------------------------------------------------|
| `tw_log2`   | m: data width in use and time window `2**m` (3..8)           |
| `dt_log2`   | delayed-thresholding interval `8 << dt_log2` steps           |
| `sb_en`     | sparsity boosting on                                         |
| `sgs_en`    | spike generation skipping on                                 |
| `sgs_th`    | SGS threshold on the average input count                     |
| `thres`     | θ_DT                                                         |
| `in_h`, `in_w`, `cin` | input feature map                                  |
| `ksize`     | square kernel size (1..7); stride 1, no padding              |
| `co_groups` | output channels / 8                                          |

Memory layouts (all word addresses):

* IMEM, 8-bit words: `(y * in_w + x) * cin + ci`. Values must be below `2**m`.
* WMEM, 64-bit words of 8 signed 8-bit weights (channel 0 in bits 7:0):
  `((cg * cin + ci) * k + ky) * k + kx`.
* OMEM, 64-bit words of 8 counts: `(cg * ho + oy) * wo + ox`, with
  `ho = in_h - k + 1`, `wo = in_w - k + 1`.

Padding, if wanted, is written into IMEM by the host. The `cfg` fields must
stay stable while the core is busy; assertions in `snn_controller` check the
configuration ranges at start.

## Timing

There is no overlap between fetch, generation and accumulation, so the cycle
count is easy to predict (the end-to-end testbench checks it exactly):

* prediction pass (only with SGS): `2 + 2 * taps` per row group;
* per row group: `1` (lookup) `+ 4` (write-back), plus, unless all rows are
  skipped, per interval `1 + 4 + 2 * taps` and per 8-step block and tap
  `1 + max(1, N)`, where `N` is the sum over TS-MLE slots of the largest
  level;
* `+ 2` per layer (start and done).

`taps = cin * k * k`. The `N` term is where TS-MLE and SLCS pay off: without
them each 8-step block would take 8 cycles per tap.

## Parameters and sizes

From the paper: 8-bit input data, 8 ETGs with 8 registers each (8 time steps
per cycle), a 4 x 8 PE array, 2-bit spike levels. This design's own choices:
IMEM 4096 x 8 bit, WMEM 2048 x 64 bit, OMEM 1024 x 64 bit, a 1024-entry
skipping map, 8-bit signed weights, 32-bit PSUMs, 16-bit θ_DT and counters.
The memory sizes are placeholders: the paper gives no on-chip memory sizes.
With them a whole layer of the evaluated networks (CIFAR-10 ResNet-12,
CIFAR-100 VGG16, ImageNet ResNet-50) does not fit at once; the host must tile
layers. Strided convolutions, pooling, residual additions and depthwise
convolutions are not supported by the controller.

## First-layer workloads

`tb_workload_layers` runs a 32 x 32 x 3 input through a 3 x 3 convolution
into one group of 8 output channels (30 x 30 outputs), the size of the first
layer of a CIFAR network, at the time windows of the paper's settings. The
data is synthetic (40 % zeros, the rest half-normal), so the numbers below
show the mechanisms at work, not the paper's accuracy or spike-ratio
results. All output counts match the reference model.

| setting | input spike ratio | after SB | layer cycles | PE cycles (TS-MLE + SLCS) | PE cycles at 1 per step |
|---------|------------------:|---------:|-------------:|--------------------------:|------------------------:|
| TW 16, D 8, SB + SGS  | 10.3 % | 9.4 % | 80,391  | 22,599 | 103,248 |
| TW 64, D 16, SB + SGS | 8.6 %  | 7.9 % | 206,552 | 75,264 | 411,264 |
| TW 64, D 16, no SB/SGS | 8.7 % | 8.7 % | 202,779 | 86,200 | 414,720 |

(The third run is not slower because of SB/SGS: it skips the prediction
pass, which costs more than the few rows it saves at this threshold.) Because
fetch and accumulation are not overlapped, the two cycles per tap for reading
IMEM/WMEM and the one cycle per block for generation dominate the layer time
once TS-MLE and SLCS have shrunk the PE work; overlapping them is the obvious
next step for throughput.

## Where this design departs from, or adds to, the paper

* Eigen-train starting positions (`P/2 - 1`) are chosen here; the paper shows
  staggered trains without step numbers.
* The ETG's gate is a mask (AND) of each register by the input bit; the
  paper's drawing labels this gate OR. ETG registers are loaded in parallel,
  not shifted along a chain, and a block mask/select pair serves windows
  longer than 8 steps.
* Time window is configurable at run time (8..256).
* SB follows the prose rule (see above).
* SGS compares `sum < th * size` instead of dividing; prediction is a
  separate pass.
* TS-MLE adds a four-slot case; levels are 0..3 (the paper's drawing shows a
  scale to 4, its text says 0 to 3).
* SLCS skips all-zero slots entirely.
* Thresholding: negative PSUM gives no spike, remainder discarded, counts
  saturate at 255.
* Only one core is built; the paper's drawing shows several stacked cores but
  not how many or how they share weights. Spikes and weights are broadcast
  along rows/columns instead of being forwarded PE to PE.
* The external interface between layers is represented by the host memory
  ports.

## Files

| file | contents |
|------|----------|
| `rtl/snn_pkg.sv` | sizes, `level_t`, `cfg_t` |
| `rtl/sb_unit.sv` | sparsity boosting |
| `rtl/sgs_unit.sv` | SGS prediction and skipping map |
| `rtl/etg.sv` | one eigen-train generator |
| `rtl/superposition_unit.sv` | 8 ETGs + bit-wise OR |
| `rtl/tsmle_encoder.sv` | TS-MLE |
| `rtl/slcs_unit.sv` | spike-level clock skipping |
| `rtl/pe.sv`, `rtl/pe_array.sv` | PE and 4 x 8 array |
| `rtl/thres_unit.sv` | divider-based delayed thresholding and counters |
| `rtl/imem.sv`, `rtl/wmem.sv`, `rtl/omem.sv` | memories |
| `rtl/snn_controller.sv` | sequencer |
| `rtl/snn_core.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_workload_layers.sv` | first-layer-sized runs at windows 16 and 64 |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
(watchdog included). With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/snn_pkg.sv tb/tb_snn_core.sv \
          --top-module tb_snn_core -o sim
./obj_dir/sim
```

Replace `snn_core` by any module name for its unit test. `tb_snn_core` runs
the core at its default parameters through four layers: window 16 with SB
and SGS, window 64 with a high SGS threshold (whole row groups skipped),
window 256 with dense inputs and a low threshold (counts saturate), and a 1x1
kernel. It compares every output count with a reference model written from
the encoding rules, checks the exact cycle count of each layer, and fails if
any mechanism (boosting, row and group skipping, 2- and 4-slot TS-MLE, short
and empty SLCS groups, multi-spike thresholding, saturation, partly filled
row groups) never occurred. It runs in well under a second.
