# A compiled, bit-serial Resnet residual block

This is synthesizable SystemVerilog for one Resnet50 bottleneck residual block
(1x1 → 3x3 → 1x1 convolutions plus the identity shortcut). The trained weights
are constants of the hardware, not data in a memory. Because the network is
"compiled" into logic in this way:

* a weight of zero costs nothing. The 80 % unstructured sparsity of a pruned
  model simply removes wires.
* a multiplication by a known constant turns into choosing a wire. Each input
  activation goes through one **Common Factor Mass Multiplication (CFMM)**
  block, which makes *all* of its products with every possible weight
  magnitude at once. Each output channel then takes the one product its weight
  needs.
* the arithmetic is **bit-serial**. An activation moves one bit per clock, so
  a product is a single wire and an adder is one full-adder cell with a carry
  flop. This keeps every product and every sum one bit wide, which is what
  makes the fixed, constant routing affordable.

The default parameters give the `conv2_2` block of Resnet50:
256 → 64 → 64 → 256 channels on a 56 × 56 map, 4 kernel instances and no
folding. The same RTL elaborated with `C_IN=2048, C_MID=512, H=W=7, INST=1,
FOLD=4` gives the `conv5_2` block, folded four ways.

## Number formats and the bit-serial word

| quantity | format |
|---|---|
| activation | unsigned 8 bit. Every activation inside a block comes after a ReLU and is saturated to 0..255. |
| weight | INT7 held as sign + 6-bit magnitude (−63..63). About 80 % of weights are zero. |
| bit-serial word | `T` clocks, LSB first: 8 activation bits, then zeros. `T = 8 + 6 + ceil(log2(N+1)) + 1`, where N is the number of adder-tree inputs. This gives T = 24, 23 and 22 for the three default layers. |
| kernel output | `T`-bit two's complement, off by the number of negative weights used (see below). |
| accumulated sum | `AW = serial_len(K*K*NIN)` bits, signed. |
| scale | 16-bit unsigned per output channel, 16 fraction bits, rounded half up. |

**Sign handling.** The CFMM only makes products with magnitudes. The sign
goes into the adder tree. A product of a negative weight enters its tree
inverted, bit by bit and for the whole word, which is its one's complement.
Over a `T`-bit word, `~p` equals `−p − 1`, so every negative term comes out one
too small. The error is a per-channel constant: the number of negative weights
of that output channel. The collector's bias constant adds it back, so the
correction costs no hardware. For the error to really be constant, every
output pixel must receive every tap of its filter. The feeder therefore also
runs passes over the zero padding around the map. Those passes contribute
only the `−1` terms.

## The kernel

`kernel.sv` holds one convolution layer's weights. One **pass** takes `INST`
neighbouring input pixels of a row, with all (or, when folded, `NIN/FOLD`) of
their channels. It produces everything those pixels contribute to the output.

```
 x[i][m] ──► CFMM(i,m) ──► 64 product streams p[i][m][0..63]
                              │
              constant routing (one table per tree): pick p[i][m][|w|],
              invert if w<0, leave out if w=0, FOLD-way mux if folded
                              │
            adder tree per output element (popcount of the routed bits)
                              │
            shift right accumulator per output element ──► y[r][j][o]
```

**CFMM** (`cfmm.sv`). `x·1` is the input itself, and `x·0` is a constant 0.
The odd products come from a chain of bit-serial adders,
`x·(k+2) = x·k + 2x` for k = 1, 3, …, 61. That is 31 adders, and `2x` is `x`
delayed one clock. An even product is an odd product shifted left, and a shift
left of a bit-serial stream is one flip-flop. So `p[2m]` is `p[m]` delayed by
one clock. All 64 streams come out aligned, one clock after the input. A
product of an 8-bit activation and a magnitude below 64 is under 2^14. Every
stream and carry therefore returns to zero before the word ends, and words can
follow each other with no clearing.

**Multi-instance slices.** A K × K filter applied to `INST` neighbouring input
pixels reaches a K × (INST+K−1) slice of output pixels. With K = 3 and
INST = 4 this is a 3 × 6 slice. Output column j of the slice receives the
instances whose footprint covers it: {0}, {0,1}, {0,1,2}, {1,2,3}, {2,3}, {3}.
There is one adder tree per slice element and output channel. It adds the
products of all instances and input channels that reach that element, so
overlapping footprints are summed inside the tree. For slice element
(r, j, o), instance i and input channel m use the weight
`W[o][m][dy = K−1−r][dx = i−j+K−1]`. All trees of a kernel get the width of
the widest one, `min(K,INST)·NIN/FOLD` inputs. Inputs with no weight are
constant zeros, so all trees have the same latency.

**Adder tree** (`adder_tree.sv`, `bb1.sv`, `red63.sv`). Each clock, the tree
counts the ones among its inputs. It is built from the following parts.

* **6:3 reduction** (`red63`) counts six bits A..F. Two 4-input functions and
  a parity split A+B+C+D into a sum bit S and two weight-2 carries C1, C2.
  Three carry-chain cells then add E + F + S (bit 0) and C1 + C2 (bit 1, with
  the carry-out as bit 2). The first cell adds S/2 + S/2. Its carry-out is S,
  and its sum output just passes on the carry coming up the chain. That carry
  is the top bit of the *previous* adder on the chain, which leaves through
  this cell for free (a "hidden carry").
* **Building Block 1** (`bb1`) puts two reductions and a 3-bit adder on one
  chain. The 3-bit adder's carry-out appears through the second reduction's
  first cell. That reduction's bit 2 appears through the first reduction's
  first cell. The reduction outputs are registered. The adder output is
  registered only when `REG_SUM` is set.
* **The tree** puts one BB1 on every 12 inputs. Its 3-bit adder adds the BB1's
  own two registered counts, giving a 4-bit count. After that comes a binary
  tree of ordinary adders. There is a pipeline register after every second
  adder stage: after the reductions, then after parallel levels 2, 4, …
  counted from the leaves. The latency is `1 + floor(L/2)`, where
  `L = ceil(log2(ceil(N/12)))`. A tag bit marking bit 0 of each word travels
  through the same number of flops.

**Shift right accumulator** (`sra.sv`). It receives the column counts c_t,
LSB first. Each clock it does `acc ← (acc >> 1) + (c_t << (T−1))`. After T
clocks `acc = Σ c_t·2^t` exactly. The low T bits are the signed result.

**Folding.** With `FOLD > 1`, one pass handles one of `FOLD` groups of input
channels. Each tree input becomes a `FOLD`-way multiplexer between the products
the different phases need, selected by the pass's phase. The accumulator adds
the phases' partial sums.

**Timing.** A word is T clocks. `y_valid` rises `T + LAT` clock edges after
the edge that samples `first` (LAT is the tree latency). The slice outputs hold
their values until the next word's result.

## Around the kernel: feeder, accumulator, collector, buffers

Each layer is a `conv_stage`:
feeder → kernel → accumulator → collector, between two buffers.

* **Feeder.** A pass is given by a row `y`, a first column `x0` and a phase.
  The feeder reads the `INST` pixel words, one per clock. A pixel outside the
  map is replaced by zeros. It keeps the phase's channel group and shifts it
  out LSB first for T clocks, marking bit 0 with `first`.
* **Accumulator.** It holds one word of `NOUT` partial sums per output pixel.
  Each slice is added into it, one slice element per clock, by
  read-modify-write, at the output position `(oy0, ox0) = (y, x0) − (K−1)/2`.
  Elements outside the map are skipped. After the last pass it drains the map
  in pixel order to the collector with a valid/ready handshake, and clears
  each word as it goes. After reset it clears the whole memory once, taking
  H·W clocks.
* **Collector.** For each output channel o it computes
  `v = acc + bias[o] + nneg[o]`, then `v = round(v·scale[o] / 2^16)`. In the
  last layer it then adds the shortcut activation. Finally it applies ReLU and
  saturates to 0..255. `LANES` multipliers are shared by all channels, so a
  pixel takes `NOUT/LANES` clocks. The shortcut pixel is read from the block's
  input buffer at the same address.
* **Buffers** (`fm_buffer`). Each buffer is block RAM with one word of all
  channels per pixel, at address `y·W + x`. The block's input and output
  buffers are double buffers: a host can load the next image, or read the last
  result, while the block works. The two buffers between layers have a single
  bank.

**Schedule.** A `conv_stage` runs the passes of a whole image in this order:
rows −P … H−1+P, then column groups −P, −P+INST, …, then fold phases
(P = (K−1)/2). It starts a pass only after the previous slice has reached the
accumulator. Then it drains through the collector. `resblock` runs its three
layers one after another.

## Top-level interface (`resblock`)

| port | dir | width | meaning |
|---|---|---|---|
| `in_we, in_addr, in_data` | in | 1, ⌈log2 HW⌉, 8·C_IN | write a pixel into the input buffer's write bank |
| `in_swap` | in | 1 | flip the input banks (after loading, before `start`) |
| `start` | in | 1 | process the image in the input read bank (taken while `!busy`) |
| `busy`, `done` | out | 1 | `done` pulses when the result is complete. The output banks flip at that moment. |
| `out_re, out_addr` | in | 1, ⌈log2 HW⌉ | read a result pixel; `out_data` is valid the next clock |
| `out_data` | out | 8·C_IN | channel c is in bits [8c+7:8c] |

## The compiled parameters

The trained, quantized, 80 %-sparse Resnet50 model is not part of this RTL.
`ccnn_pkg` makes each layer's parameters instead, from a deterministic integer
hash of (seed, output channel, input channel, tap). About one weight in five
is non-zero. Magnitudes are 1..63 with a random sign. Biases lie in ±4096 and
scales in 128..511 / 2^16. The layers use seeds `SEED`, `SEED+1` and
`SEED+2`. Elaboration evaluates these functions, and the testbenches call the
same ones. To compile real weights, replace `wgt`, `bias` and `scale` with
tables or functions that return the trained values. The structure does not
change.

## Departures from the original design, and what is left out

* **Layer-at-a-time schedule.** The three layers run one after another on a
  whole image. In the original design they stream concurrently and are
  rate-matched: conv2_2 used two 4-instance kernels at twice conv5_2's clock.
  Here there is one 4-instance kernel per layer. Passes are not overlapped.
  The accumulator drains after the whole image rather than row by row.
* **Accumulator on 1x1 layers.** The 1x1 layers also go through an
  accumulator. It is needed for folded layers, and the block diagram of the
  design draws one after every kernel.
* **Shortcut projection.** The optional 1x1 kernel, collector and buffer on
  the shortcut path are not built, because conv2_2 and conv5_2 have identity
  shortcuts.
* **Things that only help placement, routing or measurement** are not
  reproduced: CFMM duplication for routing congestion, replicated kernels that
  fill the device, and the other adder-tree variants (up to 27 bits in
  10 ALMs).
* **Generic logic instead of FPGA primitives.** The 6:3 reduction is written
  as generic full-adder cells in the same cell order as the hand-placed
  primitives. The LUT functions chosen for C1 and C2 are `A&B | (A^B)&(C^D)`
  and `C&D`.
* **This design's own choices:** the fold over input-channel groups, the
  zero-padding passes, the fixed-point format of the scale, the order bias →
  scale → shortcut → ReLU → saturate, `LANES = 16`, the word-per-pixel buffer
  layout and the host ports.
* **Not built:** the interchip Ethernet/PCIe links and the multichip
  partition of the whole network.

## Verification

Every module has a self-checking testbench in `tb/`, named `tb_<module>`.
Each testbench prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_red63` | all 128 input combinations |
| `tb_bb1` | the registered counts and the 4-bit sum, with and without the optional register |
| `tb_adder_tree` | popcounts for N = 12, 50 and 200, and the latency formula |
| `tb_cfmm` | all 64 products of 300 activations, with words sent back to back |
| `tb_sra` | random words, with and without gaps, and the timing of `y_valid` |
| `tb_kernel` | every slice element of a 3x3, 4-instance, 2x-folded kernel and of a 1x1, 2-instance kernel, against direct sums; also the latency |
| `tb_feeder`, `tb_accumulator`, `tb_collector`, `tb_fm_buffer` | the non-kernel blocks against behavioural models |
| `tb_resblock` | the whole block, end to end, at two reduced sizes (below) |

`tb_resblock` runs two reduced configurations:

* a conv2_2-like block: 8/4 channels, a 5×6 map, 4 instances;
* a conv5_2-like block: 16/8 channels, a 3×3 map, 1 instance, folded 4×.

Each runs two images. The second image is loaded into the input double buffer
while the first is processed. Every output activation is compared with
`tb_ref_pkg`, a plain integer model with exact two's complement sums. The
testbench also counts padding passes, fold phases, overlapping slice
elements, collector back-pressure, ReLU clamps, saturations, negative weights
and shortcut additions. Each of these must occur at least once.

In the reduced runs, one image takes 1501 clocks for the conv2_2-like block
and 5044 clocks for the folded one. These two reduced configurations are the
largest sizes that have been simulated. At the default size, Verilator's
front end alone runs for more than five minutes at about 9.5 GB. Its C++ build
is larger again. No full-size simulation is therefore included. Counting
passes gives an estimate of about 175 k clocks per 56×56 image at the
defaults, with roughly half of that spent draining the accumulators.

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/ccnn_pkg.sv tb/tb_ref_pkg.sv tb/tb_resblock.sv --top-module tb_resblock
./obj_dir/Vtb_resblock
```

The unit testbenches need only `rtl/ccnn_pkg.sv` and their own file, with
`-Irtl`.

## Size and tool cost

At the default size the 3×3 layer alone has 1152 adder trees. Each has 192
inputs, so it holds 16 BB1 cells. The whole block has about
4·(256+64+64) = 1536 CFMMs and 2432 trees. Linting the default `resblock`
with Verilator takes about 3 minutes and peaks at about 9 GB. Elaborating it with
slang takes about 3 minutes. The per-clock
cost of the simulation is dominated by the routing of the 3×3 layer.
