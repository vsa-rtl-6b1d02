# VSA — a vectorwise accelerator for binary-weight spiking neural networks

This is synthesizable SystemVerilog for a spiking neural network (SNN) accelerator.
It runs 3×3 convolution layers whose weights are binary (+1/−1) and whose activations are
binary spikes. It computes **one output column vector per clock**: 8 output rows of one
output channel, summed over 32 input channels. To do that it uses 2304 single-bit PEs,
each of which is one AND gate.

The design rests on four ideas, all from the VSA architecture (Lien, Hsu, Chang, ISCAS 2021):

* **Vectorwise dataflow.** One input column (8 spikes) meets one filter column (3 weight
  signs) in an 8×3 PE array. The products are summed along the diagonals. Three such arrays
  side by side, fed with three neighbouring input columns, complete a 3×3 convolution for a
  whole output column in one cycle, and every PE is busy every cycle.
* **Batch normalisation folded into the neuron.** BN turns into a per-channel bias that is
  subtracted from the convolution result, plus a per-channel threshold. The neuron needs no
  multiplier.
* **Multi-bit input layer on the same array.** An 8-bit input is split into 8 bitplanes on 8
  PE blocks, and the accumulator weights the blocks by 2^b.
* **Time steps and layer fusion kept on chip.** Membrane potentials stay in on-chip SRAM across
  time steps. The output spikes of one layer can feed the next layer directly from the temp
  SRAM, so they never go off chip.

The sections below follow the data through the machine. The configuration and the limits come
after that, then where this RTL departs from the published design and how to simulate it.

---

## 1. Arithmetic

**Spike × weight.** A weight is stored as its sign bit (`1` means −1, `0` means +1). The
product of a spike `s` and a weight `w` is the 2-bit two's-complement number `{s & w, s}`:
00 = 0, 01 = +1, 11 = −1. That AND gate is the whole PE (`vsa_pe`).

**Integrate and fire with folded BN.** Let `x[t]` be the convolution result at time step `t`.
Each neuron computes

```
V[t]  = V_res[t-1] + (x[t] - bias)          bias = mu - sigma/gamma * beta
spike = V[t] >= thr                         thr  = sigma/gamma * Vth
V_res[t] = spike ? 0 : V[t]                 (reset to zero on a spike)
```

The host precomputes `bias` and `thr` per output channel, as signed 8-bit numbers. Partial
sums, potentials, biases and thresholds are all signed 8-bit values. Every adder that produces
one of them saturates to [−128, 127].

## 2. The PE array and its ten partial sums

The PE array (`vsa_pe_array`) has 8 rows × 3 columns. Spikes `s[0..7]` run along the rows and
weights `w[0..2]` (one filter column, top to bottom) run along the columns. The diagonal sums
are:

```
ps[k] = sum_j s[k-2+j] * w[j]        k = 0..9, terms outside rows 0..7 dropped

ps[0] = s0*w2                       (top boundary)
ps[1] = s0*w1 + s1*w2               (top boundary)
ps[2] = s0*w0 + s1*w1 + s2*w2
 ...
ps[7] = s5*w0 + s6*w1 + s7*w2
ps[8] = s6*w0 + s7*w1               (bottom boundary)
ps[9] = s7*w0                       (bottom boundary)
```

Each sum lies in −3..+3 and is registered, so ten 3-bit registers hold the array's output.
This is the full vertical correlation of an 8-row input column with a 3-tall filter column.

## 3. A PE block: three columns at once

A PE block (`vsa_pe_block`) serves one input channel. Each cycle it reads one new input column
`x` and keeps the two previous ones in a two-column shift register:

| PE array | input column | filter column |
|---|---|---|
| 0 | x−2 | A (left)   |
| 1 | x−1 | B (middle) |
| 2 | x   | C (right)  |

The three arrays' sums for diagonal `k` add up to output column `X = x−2` of a 3×3 convolution
that is valid horizontally and full vertically: `O(X) = col(X)·WA + col(X+1)·WB + col(X+2)·WC`.
A sweep over `n_col` input columns therefore yields `n_col−2` output columns. The first two
reads of each sweep only fill the shift register. Horizontal zero padding is the host's job: it
stores zero columns at both edges.

The 32 PE blocks (`N_BLK`) take 32 input channels at once. They all share the same output
channel; their weight word holds 32 × 9 filter signs.

## 4. Tiles and boundaries (the hardest part)

An input feature map is cut into **tiles of 8 rows**. A tile produces ten partial-sum lanes,
but only some of them are complete:

* Lane `k` of tile `t` belongs to output row `8t + k − 1` (same-padding numbering).
* Lanes 2..7 are complete.
* Lanes 0 and 1 still lack the contribution of the tile above. That contribution is exactly
  lanes 8 and 9 of tile `t−1`.

The accumulator therefore does two things per column:

* It writes lanes 8 and 9 into the **boundary SRAM**, at an address for (output channel,
  column).
* When the next tile passes the same column, it adds them into lanes 0 and 1.

After this, lanes 0..7 of tile `t` are complete output rows `8t−1 .. 8t+6`, and these eight
values go to the IF neurons.

* In the first tile, `use_bnd = 0` and lane 0 is a border row that the host ignores.
* After the last tile, the bottom rows sit in the boundary SRAM. If they are wanted, one more
  pass over an all-zero tile with `use_bnd = 1` flushes them out.

## 5. Channel groups and the local buffer

A layer with more than 32 input channels is processed as groups of 32. For each output channel
the controller sweeps the columns once per group. The third accumulator stage adds each
group's ten lanes to the running sums of the earlier groups. Those running sums live in the
**local buffer**: 32 columns × 10 lanes × 8 bits, which is 0.3125 KB. Only after the last group
are lanes 0..7 sent on and lanes 8..9 stored as boundary. The boundary addition itself happens
in the first group. Addition is commutative, so the order does not change the result unless a
value saturates on the way.

## 6. Accumulator pipeline

`vsa_accumulator` has three stages:

| stage | work |
|---|---|
| 1 | per block: sum of its 3 arrays; encoding mode: `<< (b mod 8)`; first partial tree: 32 blocks → 4 sums |
| 2 | second partial tree: 4 → 1; encoding mode: arithmetic `>> 7`; boundary SRAM read address issued |
| 3 | add local buffer (later groups) or boundary (first group); saturate; write local buffer / boundary; 8 lanes out |

## 7. The encoding (multi-bit input) layer

The first layer takes 8-bit non-negative inputs. Each input channel `c` is split into 8
bitplanes. Bitplane `b` goes to PE block `8c + b`, and the host copies the channel's 9 weight
signs into all 8 of those blocks. With `encoding = 1`, stage 1 shifts block `b` left by
`b mod 8`, which rebuilds `pixel × weight`. Stage 2 shifts the total right by 7, which brings a
pixel normalised to [0, 1) back into the 8-bit partial-sum range. One group holds up to 4 input
channels, so an RGB image fits in one group.

The input is the same at every time step, so the convolution is done only once:

* `if_mode = IF_ENC_LOAD` (step 1): `x − bias` is stored in **membrane SRAM 2**, and the
  potential starts from 0 in membrane SRAM 1.
* `if_mode = IF_ENC_STEP` (steps 2..T): the neuron adds membrane SRAM 2 to the residue in
  membrane SRAM 1. The convolution result of that pass is ignored. The controller still sweeps
  the array to drive the pipeline, so a replay step costs as many cycles as a normal step.

## 8. IF neurons, membrane SRAMs and layer fusion

`vsa_if_neuron` holds eight neurons, one per lane. Where the potential lives is set by
`if_mode` and `mem_sel`:

| pass kind | `if_mode` | `mem_sel` | adds | residue from | writes |
|---|---|---|---|---|---|
| spiking layer | `IF_SPIKE` | 0 | x − bias | SRAM 1 (0 if `first_step`) | SRAM 1 |
| 2nd layer of a fused pair | `IF_SPIKE` | 1 | x − bias | SRAM 2 (0 if `first_step`) | SRAM 2 |
| encoding, step 1 | `IF_ENC_LOAD` | – | x − bias | 0 | SRAM 1, and x − bias to SRAM 2 |
| encoding, later steps | `IF_ENC_STEP` | – | SRAM 2 | SRAM 1 | SRAM 1 |

**Layer fusion** runs two layers on chip, one after the other:

* Layer 1 writes its output spikes to the **temp SRAM**.
* Layer 2's pass sets `src_temp = 1`, so the PE blocks read the temp SRAM instead of the spike
  SRAM.
* Layer 2 uses the other weight bank (`wgt_bank`) and keeps its potentials in membrane SRAM 2.
* Layer 2 writes its output back into a spike SRAM bank (`dst = DST_SPIKE0/1`).

The weight SRAM has two 72 KB banks so that both layers' weights stay resident. The encoding
layer also uses membrane SRAM 2, so it cannot be the second layer of a fused pair.

## 9. Post processing

`vsa_post_proc` can apply 2×2 max pooling. For spikes, the maximum of a window is the OR of its
four bits:

* Lanes `(2i, 2i+1)` are ORed, which gives 4 rows.
* An even column is held and ORed with the next, odd column. The result is written as pooled
  column `X/2`.
* The 4 pooled rows go to lanes 0..3 of the output word, or to lanes 4..7 when
  `out_half = 1`. Two consecutive tiles can therefore fill one 8-row word of the next layer.
  Writes are bit-masked, so the other half is kept.

With `pool = 0` the 8 spikes pass through unchanged.

## 10. Timing

The controller issues one spike read and one weight read per clock, with no stalls. Counting
from the clock in which a read is issued:

| clock | event |
|---|---|
| +1 | SRAM data at the PE blocks (column shift register, PE arrays) |
| +2 | PE array registers |
| +3 / +4 / +5 | accumulator stages 1 / 2 / 3 (boundary read at +4, data at +5) |
| +6 | IF input register; bias, threshold and membrane SRAMs read |
| +7 | spikes registered, membrane written |
| +8 | post processing output, written to temp or spike SRAM |

A pass takes `n_oc × n_grp × n_col` clocks of reads plus 11 clocks of drain. `done` pulses
`DRAIN+1 = 11` clocks after the last read. At full use that is 2304 spike×weight products per clock, each accumulated. At 500 MHz this
is the 2304 GOPS peak reported for the design (one product and one addition count as two
operations).

## 11. Memories and word formats

| memory | size | words × bits | read by / written by |
|---|---|---|---|
| spike SRAM, 2 banks | 2 × 4.5 KB | 144 × 256 | PE blocks / host, fused-layer output |
| weight SRAM, 2 banks | 2 × 72 KB | 2048 × 288 | PE blocks / host |
| temp SRAM | 4.5 KB | 144 × 256 | PE blocks (fused), host / post processing |
| boundary SRAM | 8 KB | 4096 × 16 | accumulator |
| local buffer (registers) | 0.3125 KB | 32 × 10 × 8 | accumulator |
| membrane SRAM 1, 2 | 2 × 32 KB | 4096 × 64 | IF neuron |
| bias, threshold SRAM | 2 × 0.25 KB | 256 × 8 | IF neuron / host |

The total is 230.3125 KB.

* **Spike/temp word (256 bits):** channel `b` of the group occupies bits `[8b +: 8]`. Bit `r`
  is tile row `r`.
* **Weight word (288 bits):** block `b` occupies bits `[9b +: 9]`. Bit `3·kx + ky` is the sign
  of filter column `kx` (0 = left) and row `ky` (0 = top).
* **Membrane word (64 bits):** lane `r` occupies bits `[8r +: 8]`.

All memories are plain arrays with one synchronous read port and one write port (read data
appears one clock after the address). A chip would use SRAM macros in their place.

## 12. Running a pass

The host (in a chip, the memory controller reading a configuration from DRAM) fills the SRAMs
through the `ext_*` port. It then presents a `cfg_t` record and pulses `start`. One pass
computes **one tile for one time step** over all output channels. The controller loops:

```
for oc in 0 .. n_oc-1
  for g in 0 .. n_grp-1              weight word  w_base + oc*n_grp + g
    for x in 0 .. n_col-1            input word   in_base + g*n_col + x
```

Addressing:

* Boundary and membrane entries are at `base + oc*(n_col-2) + X`.
* Outputs are at `out_base + (oc/32)*out_stride + X'`, where `X'` is `X`, or `X/2` when
  pooling. The spikes go in lane `oc mod 32` of that word.
* If `out_base = 1` and `out_stride = n_col_next`, a layer writes its output directly in the
  input layout of the next layer, with zero padding columns at both edges.

The host chooses the order of tiles and time steps through `first_step`, `use_bnd`,
`bnd_base` and `mem_base`. For example, time steps inside tiles with one boundary region per
step:

```
for tile:  for t in 0..T-1:  pass(first_step = (t==0), use_bnd = (tile>0),
                                  bnd_base = t*n_oc*(n_col-2), mem_base = 0,
                                  spk_bank = (tile*T+t) % 2)
```

While a pass reads one spike bank, the host may load the next input into the other bank; the
same holds for weight banks. Writes to anything a running pass uses are flagged by an
assertion in `vsa_top`.

`cfg_t` fields: `n_oc` (1..256), `n_grp` (1..8), `n_col` (3..34), `encoding`, `if_mode`,
`first_step`, `mem_sel`, `use_bnd`, `src_temp`, `spk_bank`, `wgt_bank`, `pool`, `out_half`,
`dst`, `in_base`, `w_base`, `bnd_base`, `mem_base`, `out_base`, `out_stride`.

## 13. Which networks fit

The published design is evaluated on two networks: a 3-conv MNIST net and a 12-conv CIFAR-10
net, both at 8 time steps, with 3×3 convolutions, 2×2 pooling and fully connected layers at the
end.

* **One pass of every conv layer fits.** Channels and columns stay within the local buffer
  (≤ 32 output columns), the spike SRAM (`n_grp × n_col ≤ 144`) and the membrane SRAM
  (`n_oc × columns ≤ 4096`).
* **Some whole layers do not fit over 8 time steps.** Two orders are possible, and for the
  large layers neither fits on chip:
  * Steps inside tiles: the boundary SRAM must hold one region per time step.
  * Tiles inside steps: the membrane SRAM must hold all tiles.

  These layers are the 32×32 and 16×16 CIFAR-10 layers and the 28×28 MNIST encoding layer.
  Their state would have to go off chip. The source does not say how it avoids this.
* **The 8×8 CIFAR-10 layers and the 14×14 MNIST layer fit completely.**
* **Fully connected layers are not supported.** This datapath only convolves, and the source
  does not describe how FC layers are mapped onto it.

## 14. Where this RTL is its own

The block structure, array sizes, dataflow, shifts, IF-neuron datapath, SRAM sizes and bus
widths follow the published architecture. The following are choices made here, because the
source leaves them open:

* The column shift register that feeds three arrays from one read per cycle.
* The column shift register costs two fill clocks per sweep of columns: a sweep of `n_col`
  columns gives `n_col − 2` output columns. The source's example finishes 3 output columns in
  3 clocks; here it takes 5.
* Four partial sums between the two tree stages.
* Saturation to 8 bits everywhere, and floor rounding for `>> 7`.
* Adding the boundary sums during the first channel group.
* The zero residue on the first time step, done by control rather than by clearing the SRAM.
* The whole pass/`cfg_t` programming model, the loop order and the address formulas.
* The OR pooling with half-word packing.
* One read plus one write port per SRAM.
* The host port that stands in for the memory controller.
* Horizontal convolution is "valid" over the given columns, so padding is stored by the host.

## 15. Files and simulation

```
rtl/vsa_pkg.sv            sizes, word layouts, cfg_t, tag_t, saturation helper
rtl/vsa_pe.sv             one PE (AND gate)
rtl/vsa_pe_array.sv       8x3 PEs, ten diagonal sums
rtl/vsa_pe_block.sv       3 PE arrays + column shift register
rtl/vsa_accumulator.sv    3-stage accumulator with local buffer
rtl/vsa_if_neuron.sv      8 IF neurons, folded BN, encoding/fusion modes
rtl/vsa_post_proc.sv      2x2 spike max pooling
rtl/vsa_sram.sv           1R1W synchronous SRAM (array)
rtl/vsa_pingpong_sram.sv  two-bank buffer
rtl/vsa_sys_ctrl.sv       pass controller
rtl/vsa_top.sv            the accelerator
tb/tb_*.sv                one self-checking testbench per module, plus workloads
```

Each testbench compares the design with values it computes itself and ends with a
`TB_RESULT checks=N failures=M` line. `tb_vsa_top` runs the full-size design through a
spiking layer (2 channel groups, 2 tiles, 3 time steps, ping-pong loading), a fused second
layer read from the temp SRAM, and an encoding layer with pooling. After every pass it compares
all temp and spike SRAM words with a pass-level reference model, and it counts each mechanism.
`tb_vsa_workloads` runs a fused 256→256-channel 8×8 layer pair for 8 time steps, which is the
size of the last CIFAR-10 block; the second layer writes its spikes back into spike bank 0,
over the input it has finished with. It also runs one 8-row tile of the 64-channel MNIST encoding
layer for 8 time steps.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_vsa_top \
    rtl/vsa_pkg.sv rtl/*.sv tb/tb_vsa_top.sv
./obj_dir/Vtb_vsa_top
```

List `rtl/vsa_pkg.sv` first; Verilator ignores the repeated file.
