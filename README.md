# Spatial-SpinDrop: spatial dropout in an STT-MRAM compute-in-memory layer

Monte Carlo dropout turns an ordinary network into an approximate Bayesian
one. At inference time the network is run T times, each time with a fresh
random dropout mask, and the T outputs are averaged. How widely the T outputs
spread is the uncertainty estimate. A binary network stored in a spin-transfer-torque MRAM
crossbar can do the matrix-vector products in the memory itself. The
random masks can come from the same technology: a magnetic tunnel junction
(MTJ) written with a weak, short pulse switches only with some probability.

The problem is convolution. A crossbar sees a convolutional layer as a stream
of flattened K x K moving windows, one per *input cycle*, and neighbouring
windows share most of their pixels. An element-wise dropout unit on every
crossbar row would draw a new, inconsistent mask for a shared pixel in every
cycle, and it needs one unit per row. Spatial dropout drops whole feature maps
instead. In a crossbar that means:

* one dropout unit per **input feature map** (C_in units per layer, instead of
  K*K*C_in);
* each unit switches **all the word lines that carry its feature map** on or
  off together;
* the mask is drawn **once, in the first input cycle**, and held for the
  remaining N-1 cycles of the layer.

This repository holds synthesizable SystemVerilog for the digital parts of
such a layer and behavioural models for the analog parts. At its default size
it holds the layer used for the cost figures: C_in = 256, K = 3, C_out = 512.
That is a 2304 x 512 binary weight array with 256 dropout units.

## How one dropout unit makes a mask bit

A Spatial-SpinDrop unit (`spatial_spindrop`) is a single stochastic MTJ with
its own write and read circuits. `spindrop_ctrl` sequences a sample as follows:

| phase | cycles (default) | what happens |
|---|---|---|
| SET | 10 | write current through the MTJ; it switches from parallel (P) to antiparallel (AP) with the dropout probability p |
| precharge | 1 | `vpol` and `hold` on: bias current through MTJ and reference; `ctrl` = 0 precharges both latch outputs high |
| evaluate | 4 | `ctrl` = 1: the StrongARM latch resolves the MTJ-vs-reference voltage difference into `Out` / `Out_n` |
| (held) | until next request | `hold` off, `ctrl` stays 1: the latch keeps the bit and no new read is possible |
| RESET | 5, in background | opposite current restores P, ready for the next SET |

`mask_valid` rises 15 cycles after the edge that accepts `sample_req`. At the
1 GHz clock assumed here this is 15 ns. The unit then accepts a new request
after another 5 cycles.

The mask bit is the latched `Out`. `Out` = 1 means the MTJ did *not* switch,
and the feature map is kept. The word-line gate (`wl_dropout_gate`) is built
from AND gates and a multiplexer:

```
Dropout  = Out & Enable
Dropped_i = WL_i & Dropout                 (for each of the K*K word lines)
WL_n_i    = path_enable ? Dropped_i : WL_i
```

`path_enable` is low while weights are written and during deterministic
(non-Bayesian) inference. The decoder then reaches the array directly.
`Enable` = 0 forces a group off altogether, which switches off a channel that
is not used.

Holding the mask for N cycles costs nothing extra: the layer controller
simply does not ask for a new sample. A unit that should resample on every
read gets a request on every input cycle (`resample_each`). That case arises
when dropout is applied to flattened feature maps in front of a classifier.

## The two ways of mapping a convolution

The weights of a K x K x C_in x C_out kernel can be laid out in two ways.
`STRATEGY` selects one; the weights, the inputs and the results are the same.

**Strategy 1** (default) uses one crossbar of K*K*C_in rows x C_out columns.
Each kernel is unrolled into a column. Logical row `r = c*K*K + k` holds input
channel `c` at kernel position `k = ky*K + kx`. The K*K rows of a channel are
consecutive, so dropout unit `c` gates word lines `c*K*K .. c*K*K+K*K-1` of
one *adapted decoder*. In read mode that decoder turns on a whole group of
K*K consecutive rows at once (`wl_decoder`, `group_mode` = 1). In write mode
it turns on a single row.

**Strategy 2** uses K*K crossbars of C_in rows x C_out columns, one per kernel
position, and each crossbar has its own decoder. Dropout unit `c` gates row `c`
of *every* crossbar: its AND gates take one word line from each of the K*K
decoders. Each crossbar has its own multiplexer and ADCs. The K*K
converted partial sums are added before accumulation.

The external interface is the same for both. Weight row `w_row` and input bit
`x[r]` always use the strategy-1 numbering; in strategy 2 the top sends row
`r` to crossbar `r % (K*K)`, row `r / (K*K)`.

## Data path and timing of an input cycle

```
 x (window) -> BL/SL driver latch
 controller -> WL decoder(s) -> dropout gates -> crossbar(s) -> BL MUX -> ADC
            -> [strategy 2: sum over K*K crossbars] -> shift-add accumulators
            -> comparator (activation)   -> out_act / out_sum
                                         -> Monte Carlo average -> avg_sum
```

`cim_layer_ctrl` runs a layer of `n_cycles` = N input cycles:

1. It accepts a window on `in_valid`/`in_ready` and latches it into the
   bit-line drivers.
2. If dropout is on and this is cycle 0, or `resample_each` is set, it waits
   for all units to be ready and sends them one `sample_req`. It then waits
   for all `mask_valid`. This adds 15 + 2 cycles.
3. For each of the C_in word-line groups (one input channel, K*K rows) it
   steps the bit-line multiplexer through its `MUX_RATIO` settings. In each
   setting the C_out/MUX_RATIO ADCs convert the selected columns, and
   `shift_add` adds the codes to the per-column partial sums.
4. It spends one cycle with `out_valid` high. `out_sum[j]` is the finished
   column sum, `out_act[j]` = `out_sum[j] >= threshold[j]`, and the
   accumulators clear at the end of that cycle.

So an input cycle takes C_in * MUX_RATIO + 1 cycles, which is 1025 at the
defaults, plus 17 when a mask is drawn.

**What a column sum means.** The crossbar model (`cim_crossbar`) stands in for
the analog array. The current of column j is taken to be the number of active
rows whose input bit equals the stored weight bit. This is the XNOR popcount of a binary
network. For R active rows the +-1 dot product is `2*count - R`. A sign
activation after batch normalisation is therefore `count >= thr` for some per-column
threshold, and that threshold is computed off-line and written with `thr_we`.
The comparator holds these thresholds. A dropped row simply adds nothing. The
1/(1-p) rescaling of dropout is also expected to be folded into the
thresholds.

**ADC range.** One group of K*K = 9 rows gives at most 9 per column, so the
default 4-bit ADC never clips in strategy 1. In strategy 2 each crossbar
sees one row per step. A narrower ADC saturates; `adc_sat` reports this
for the run.

**Monte Carlo averaging.** With `avg_en` high, every `out_valid` also adds
`out_sum` into `mc_average`. After T = 2^LOG2_T outputs (default 16),
`avg_valid` pulses and `avg_sum` = floor(sum / T). A classifier layer run T
times with dropout on gives the averaged scores this way. The softmax and the
uncertainty threshold are left to software.

## The four dropout configurations

| configuration | how this RTL covers it |
|---|---|
| before a convolution, strategy 1 | `STRATEGY` = 1, mask held for N cycles |
| before a convolution, strategy 2 | `STRATEGY` = 2, mask held for N cycles |
| on flattened feature maps, no adaptive average pool (H*W inputs per map) | `STRATEGY` = 1 with `K*K` = H*W (e.g. `K` = 2 for 2x2 maps), N = 1, `resample_each` = 1 |
| on features after an adaptive average pool (one input per map) | `K` = 1, N = 1, `resample_each` = 1: one unit per row |

`tb_spatial_spindrop_cim_fc` runs the last two configurations.

## Modules

| file | role | kind |
|---|---|---|
| `spindrop_pkg.sv` | MTJ state, controller phase enums, p = 15 % constant | package |
| `mtj_stochastic_cell.sv` | MTJ + four-transistor SET/RESET write circuit | behavioural model |
| `mtj_sense_amp.sv` | pre-amplifier + StrongARM latch | behavioural model |
| `spindrop_ctrl.sv` | sample sequencer of one unit | RTL |
| `wl_dropout_gate.sv` | AND / multiplexer word-line gating | RTL |
| `spatial_spindrop.sv` | one complete dropout unit | structural, contains models |
| `wl_decoder.sv` | adapted decoder: single row or group of rows | RTL |
| `cim_crossbar.sv` | weight array, column currents as XNOR counts | behavioural model (synthesizable form) |
| `bl_mux.sv` | bit-line multiplexer | RTL |
| `cim_adc.sv` | column ADC with saturation | behavioural model |
| `shift_add.sv` | shift-adder / accumulator bank | RTL |
| `act_comparator.sv` | threshold registers and activation | RTL |
| `mc_average.sv` | T-pass averaging | RTL |
| `cim_layer_ctrl.sv` | layer sequencer | RTL |
| `spatial_spindrop_cim.sv` | top: one layer, either strategy | top |

The MTJ and sense-amplifier models use `$urandom` and `initial`. The top
simulates but does not synthesize as a whole. Replacing those two models
with the real macros leaves a synthesizable digital layer.

## Parameters of the top

| parameter | default | origin |
|---|---|---|
| `STRATEGY` | 1 | mapping 1 or 2 |
| `K`, `C_IN`, `C_OUT` | 3, 256, 512 | layer used for the published cost figures |
| `P_SET_Q16` | 9830 | p = 15 % (x 65536), the training dropout rate |
| `SET_CYCLES`, `SENSE_CYCLES`, `RESET_CYCLES` | 10, 5, 5 | this design; SET+SENSE = 15 matches the 15 ns sampling latency at 1 GHz |
| `MUX_RATIO` | 4 | this design |
| `ADC_BITS` | 4 | this design |
| `LOG2_T` | 4 (T = 16) | this design |

## Where this departs from, or adds to, the published design

* **All timing is in clock cycles at an assumed 1 GHz.** Only the 15 ns
  sampling latency is published. The split into SET and read phases, and
  the RESET run in the background after the read, are choices made here.
* **Polarity.** `Out` = 1 (MTJ not switched) keeps a feature map. The
  published figure does not fix which latch output drives the gate, nor which
  transmission gate `path_enable` opens.
* **One logical array.** The published cost figures assume 64 x 32 physical
  crossbars tiled to the layer size. Here the array is one logical 2304 x 512
  array, and the tiling is not modelled.
* **One word-line group per step.** The text says groups of rows are selected
  and accumulated until all rows are done, but not how many at once. Here it
  is one group (one input channel) per step.
* **Column current as an XNOR count.** The bit-cell encoding of +-1 products
  is not published.
* **No bit shifting.** With one-bit inputs and one-bit weights every partial
  sum has the same weight, so the shift amount of `shift_add` is tied to 0
  in the top. The shifter is there for multi-bit inputs applied bit-serially.
* **The multiplexer ratio, ADC resolution, threshold form, averaging of column
  sums and T** are choices made here.
* **Not built:** the SL/BL drivers' analog behaviour, weight programming
  pulses for the array MTJs, and the mapping of a whole network (pooling,
  residual additions, the network-level schedule).
  Area, power and energy figures cannot be reproduced from RTL.

## Running the testbenches

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog. The
end-to-end tests are:

* `tb_spatial_spindrop_cim`: three reduced layers (C_in = 8, C_out = 8) run
  in lock step: strategy 1, strategy 2, and strategy 1 with a 3-bit ADC.
  They cover deterministic runs, a held mask, resampling, disabled units,
  ADC saturation and T = 4 averaging. Every sum is compared with a reference,
  and each mechanism must occur.
* `tb_spatial_spindrop_cim_full`: the default-size layer. It writes all 2304
  rows, then runs 3 Bayesian input cycles with a held mask and one
  deterministic cycle. It checks all 512 columns, the cycle counts and the drop rate.
  It takes about 20 s.
* `tb_spatial_spindrop_cim_fc`: the two topology-wise configurations.

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl --top-module tb_spatial_spindrop_cim_full \
    rtl/spindrop_pkg.sv $(ls rtl/*.sv | grep -v spindrop_pkg) \
    tb/tb_spatial_spindrop_cim_full.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

The package is listed first so that every module can import it. The
statistical checks use wide bounds: four standard deviations for the 15 %
switching and drop rates.
