# Pruned binary-weight convolution layers as a pipeline of multiplexer blocks

This RTL implements an FPGA-style accelerator for 3x3 convolution layers that
have been trained under two constraints at once:

* **Deterministic pruning.** In every 3x3 kernel slice `w[.,.,k,l]` (input map
  `k`, output map `l`) only one of the nine taps is kept, and which one is fixed
  by a rule instead of being learned or stored: tap position `pos = k mod 9`,
  i.e. the kept tap satisfies `iota + 3*lambda = k (mod 9)`. The position
  depends on the input map only, so all output maps read input map `k` through
  the same shifted window.
* **Binary weights.** The kept tap is +1 or -1 (BinaryConnect-style), so a
  multiplication becomes a choice between `+x` and `-x`.

The architecture is the "layer block" pipeline of Boukli Hacene, Gripon,
Arzel, Farrugia and Bengio, *Quantized Guided Pruning for Efficient Hardware
Implementations of Convolutional Neural Networks* (2018). The RTL here is an
independent implementation of it.

Together these turn a 3x3 convolution over `K` input maps into `K` additions
of shifted, signed input rows. A layer therefore needs no multipliers at all:
a row of inputs is read once, shifted by a multiplexer, and added or
subtracted into `P` accumulators, one per output map computed in parallel.
Each layer gets its own hardware ("layer block"), and the blocks are chained
so that several layers, each working on a different image, run at the same
time.

## What one layer computes

For output row `i`, column `j` and output map `l` (stride `S`, one row and
column of zero padding around the input):

```
pos      = k mod 9
iota_k   = pos mod 3          (row offset of the kept tap)
lambda_k = pos div 3          (column offset of the kept tap)
y[i][j][l] = ReLU( sum_{k=0..K-1}  s[k][l] * xpad[S*i + iota_k][S*j + lambda_k][k] )
```

`s[k][l]` is +1 when the stored weight bit is 1 and -1 when it is 0. `xpad`
is the input map with one ring of zeros around it. All values are `N`-bit
two's-complement fixed-point numbers (`N = 16` by default); sums wrap modulo
2^N and there is no rescaling between layers.

Taking `iota` as the row offset and `lambda` as the column offset is a
reading of the pruning rule. Swapping them changes which taps are kept, but
not the hardware structure.

## Inside a layer block

```
            nR                 +---------------- memory block ----------------+
 X1 rows ----/---> BRAM one ---> window mux ---> BRAM two ---> X2 (nR') ------+--> processing unit --> Y (nR')
 (padded)          IMAX*K words   (x2_select)    IO*K words                    |    P lanes + counter
                                                 weight store -> W (P bits) ---+    + selector + ReLU
                                                 FI, Enable_s  ----------------+
                                  <------------------------------ Itter_done --+
```

**BRAM one** (`sdp_ram`) receives the layer's input. One word holds one
padded row `X1` of one input map: `R = JMAX + 2` values, with the first and
last value zero. Address = `row*K + k`.

**Copy with window selection** (`x2_select`). Before a layer starts on an
image, the image is copied from BRAM one to BRAM two, one word per cycle.
For output row `i` and input map `k`, the copy reads input row
`S*i + iota_k - 1`, or uses zeros when that row lies above or below the map.
The window multiplexers then keep `RP = JMAX/S` values starting at column
`lambda_k`:

```
x2[j] = x1[S*j + lambda_k]        j = 0 .. RP-1
```

With stride 1 that is the first, middle or last `R-2` values of the padded
row. With stride 2 it is every other value. Applying the row offset here
means the processing unit never deals with tap positions. BRAM two then holds
exactly the `IO*K` vectors the layer needs (`IO = IMAX/S` output rows), at
address `i*K + k`.

**Weight store.** `K*L/P` words of `P` bits. Word `g*K + k` holds the signs
of the kept taps of input map `k` for output maps `g*P .. g*P+P-1`, with bit
`p` for map `g*P+p`. The store is loaded through a write port before images
are run.

**Processing unit** (`processing_unit`, built from `pu_lane`). Lane `p` has
two multiplexers, an adder and a register of `RP` values:

```
reg_p <= (FI ? 0 : reg_p) + (W[p] ? X2 : -X2)
```

The lanes work on the whole row vector at once, so after the `K` vectors of
one output row, register `p` holds that row of output map `g*P+p` for all
columns. A counter then selects the registers one after another through a
`P`-to-1 selector. The selected row goes through ReLU and leaves as `Y`, one
row vector per cycle. The memory block never sends a separate valid signal:
it drives `X2 = 0` whenever it is not streaming, and adding zero leaves the
registers unchanged.

## Schedule and clock cycles

This is the part that needs the most care. The controller in `mem_block`
runs one image through these phases:

| phase | cycles | what happens |
|---|---|---|
| COPY | `IO*K` | one BRAM-one read and one BRAM-two write per cycle. After the last one BRAM one is marked free |
| WAIT | 0 or more | only while the next layer's BRAM one is still occupied |
| READ/DRAIN, per output row and group of `P` maps | `K + P` | `K` cycles stream `X2` and `W`, then `P` cycles write registers out |

Within one group, counting from the cycle of the first read (cycle 0):

```
cycle      0    1    2   ...  K-1   K       K+1  ...  K+P
read addr  k=0  k=1  k=2 ...  K-1   -       -         (next group k=0)
X2, W      -    k=0  k=1 ...  K-2   K-1     0         0
FI              1    0        0     0
Enable_s                            1
Y valid                                     p=0  ...  p=P-1
Itter_done                                            1
```

BRAM reads take one clock, so data reach the lanes one cycle after the
address. `Enable_s` is a one-cycle pulse that comes together with the last
vector and starts the output counter. `Itter_done` is high in the cycle of
the last output. The controller issues the first read of the next group in
that same cycle, which the register being emptied allows: register `P-1` is
read in that cycle, and the next group's `FI` overwrites registers only one
cycle later. So from the second group on, each group costs exactly `K + P`
cycles.

Per image and layer, from the first copy cycle to the last output:

```
CCs = IO*K  +  IO*K*L/P  +  IO*L  + 1
```

The first three terms are the layer's clock-cycle count as the design
intends it: copy, accumulate, write out. The `+1` is the single read latency
before the first vector. For the default Conv64-64 layer (32x32 maps,
`K = L = 64`, `P = 16`) that is 2048 + 8192 + 2048 + 1 = 12289 cycles, about
51.2 us at 240 MHz. `tb_layer_block` checks this count exactly, for stride
1 and stride 2.

Note that `P` output maps are computed from one stream of `X2` vectors. More
parallelism than `P = L` would need more than one `X2` read per cycle, so
`P <= L` is required, and the RTL also requires `P` to divide `L`.

## The pipeline of layer blocks

`qgp_top` chains `NL` blocks. Block `b` writes its output rows, with a zero
added at each end, directly into BRAM one of block `b+1`, at address
`row*L + l`. That is the layout the next block expects with `K = L`. Three
signals coordinate the blocks:

* `x1_free`: BRAM one holds no un-copied image. A block starts streaming an
  image (leaves WAIT) only when the next block's `x1_free` is high. After
  that it may write into that BRAM for the whole image.
* `x1_done`: a pulse with the last write of an image. It marks BRAM one as
  full, which starts the receiving block's COPY.
* A block frees its own BRAM one as soon as the copy ends. The image is then
  still being processed out of BRAM two.

So while block `b` accumulates image `n`, block `b-1` is already filling
block `b`'s BRAM one with image `n+1`. In steady state images leave the
pipeline one layer's cycle count apart, plus at most three cycles of
handover (an idle cycle between images and the read latency). The latency
grows with `NL`, the image rate does not. `tb_qgp_full`, `tb_qgp_top` and
`tb_qgp_workloads` check the interval against `IO*K + IO*K*L/P + IO*L + 3`.

At the ends of the chain, the input port (`in_*`, `in_free`, `in_done`)
behaves like a previous layer. The output port (`out_*`, `out_done`) needs a
consumer that holds `out_free` high while it can take a whole image.

## Parameters

| parameter | default | meaning | source |
|---|---|---|---|
| `NL` | 4 | layer blocks in `qgp_top` | the "4 x Conv64-64" FPGA configuration |
| `C` (`K`, `L`) | 64 | input and output maps per layer | Conv64-64 layers of Resnet18 |
| `IMAX`, `JMAX` | 32 | map height and width | CIFAR10 input size |
| `P` | 16 | output maps computed in parallel | the Conv64-64 configuration |
| `N` | 16 | bits per value | chosen (see below) |
| `STRIDE` | 1 | convolution stride (`layer_block`, `mem_block`) | stride 1 and 2 are described |

The value width `n` is not given numerically. Reported flip-flop counts (for
instance about 15,000 per layer for Conv128-128 with `P = 32`) leave room for
`P * RP * n` accumulator bits only with `n` well under 32. They fit `n = 16`
for every reported configuration, so 16 is the default.

At the defaults one block has 2048 x 544 bits of BRAM one, 2048 x 512 bits of
BRAM two, 4096 weight bits and 8192 accumulator flip-flops.

`qgp_top` uses one parameter set for all blocks and stride 1, so map sizes
stay the same along the chain. A stride-2 layer changes the map size. It is
supported by `layer_block` but not chained in the top.

## Files

| file | contents |
|---|---|
| `rtl/qgp_pkg.sv` | tap-position functions, controller phase type |
| `rtl/sdp_ram.sv` | simple dual-port RAM, 1-cycle registered read |
| `rtl/x2_select.sv` | window multiplexers between the two BRAMs |
| `rtl/pu_lane.sv` | one accumulator lane |
| `rtl/processing_unit.sv` | `P` lanes, output counter, selector, ReLU |
| `rtl/mem_block.sv` | BRAM one, BRAM two, weight store, copy and read control |
| `rtl/layer_block.sv` | memory block + processing unit |
| `rtl/qgp_top.sv` | pipeline of `NL` layer blocks |
| `tb/tb_*.sv` | one self-checking testbench per module (below) |
| `tb/lb_env.sv`, `tb/qgp_env.sv` | reusable checking environments for a layer block and for the pipeline |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself
through a watchdog if the design hangs. Reference results are computed in
the testbench straight from the layer formula above, not from the RTL's
structure.

* `tb_sdp_ram`, `tb_x2_select`, `tb_pu_lane`, `tb_processing_unit`: unit
  checks. The last one covers the exact cycles of `Y`, `y_idx` and
  `Itter_done`.
* `tb_mem_block`: every `X2`/`W`/`FI`/`Enable_s` beat of an image, with all
  nine tap positions, padding rows, `x1_free` timing and the cycle count.
* `tb_layer_block`: complete layers at stride 1 and 2, with random
  back-pressure from the next layer. It checks every output value, that each
  output address is written exactly once, and the exact cycle count.
* `tb_qgp_top`: three small blocks, six images, consumer back-pressure.
* `tb_qgp_full`: the top at its default parameters (four Conv64-64 blocks),
  six images, all outputs compared.
* `tb_qgp_workloads`: three-layer pipelines at the full Conv128-128 (`P` = 32
  and 64), Conv256-256 (`P` = 64 and 128) and Conv512-512 (`P` = 128) sizes.

The pipeline testbenches count the design's mechanisms and fail if one never
occurs: copies, back-pressure waits, input back-pressure, cycles with several
blocks busy at once, and ReLU clamps.

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qgp_pkg.sv tb/tb_qgp_full.sv \
          --top-module tb_qgp_full -Mdir obj_full -o sim
./obj_full/sim
```

The full-size pipeline compiles in under a minute and simulates six images
in a few seconds.

## Where this RTL goes beyond, or departs from, the original description

The following are not specified in the original description. They are this
design's own choices:

* The value width (`n = 16`).
* The wrap-around arithmetic; no saturation is done.
* The weight encoding (1 = +1).
* Where the weights live and how they are loaded.
* The reset: synchronous, and for control state only.
* The form of `Enable_s` (a pulse) and the cycle of `Itter_done`.
* The `x1_free` / `x1_done` handshake.
* The loop order: row, then group, then input map.
* Applying the tap's row offset during the copy.

The original mentions only the column window.

For stride 2 the original draws pairwise multiplexers that choose odd or even
positions. The general rule `x1[2j + lambda]` used here also covers
`lambda = 2`, which takes its value from the next pair.

What the description calls a DEMUX after the registers is, by function, a
P-to-1 selector. It is built as one.

Not built, because the hardware description does not cover them:
* Residual additions, 1x1 convolutions, pooling, batch normalisation or
  scaling, and the classifier of a full network.
* Changing map sizes along the pipeline.
* The training that produces the binary weights.

A whole Resnet-style network therefore does not run on this RTL. The tested
scope is one to four 3x3 layers, as in the reported FPGA experiments.
