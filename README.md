# VESTA: one spike-driven PE array for every layer of a spiking transformer

A spiking transformer such as Spikformer V2 mixes three kinds of layers: 2x2
stride-2 convolutions in its convolutional stem, large linear layers in its
MLP and attention projections, and matrix products inside self-attention.
Between layers all activations are binary spikes, one per neuron and
timestep, over four timesteps. VESTA exploits this: a product of an 8-bit
weight with a spike is just "the weight or zero", so a processing element
(PE) is a 2:1 selector instead of a multiplier. One array of 512 PE units,
each holding one 8-bit weight shared by eight such PEs, serves all layer
types. Only the way inputs are placed on the PEs and the way the adder tree
combines the PE outputs change from one layer type to the next.

This RTL implements that architecture in synthesizable SystemVerilog: the PE
array, the mode-dependent adder tree, a partial-sum buffer, the four-timestep
LIF neuron with folded batch-norm (TFLIF), the IAND residual gate, the five
on-chip buffers and a controller that sequences whole layers.

## Block diagram and data path

```
 off-chip  <->  memory controller  <->  LI (50 KB)  SI (1 KB)  LW (50 KB)  SW (0.5 KB)
 (host_*)                                   \        /            \        /
                                        input select            weight select
                                          4096 bits               4096 bits
                                               \                    /
                                     PE module: 512 units x 8 PE blocks
                                                       |
                                      adder tree (mode: ZSC/SSSC/WSSL/STDP)
                                                       |  8 x 24 bit
                                   partial-sum buffer (192 bit) + requantise
                                                       |  8 x 8 bit (register)
                                       2 x TFLIF (2 pixels x 4 timesteps)
                                            |  8 spikes          |
                          SI write-back <---+      IAND / select +---> Output SRAM (0.25 KB)
                                                                  +---> res_* stream
```

Each clock cycle the system controller issues one *pass*: one 4096-bit input
word and one 4096-bit weight word are read. Unit `u` takes weight byte `u`;
PE `p` of unit `u` takes input bit `8u+p`. A pass yields eight results, one
per PE position, which are two output pixels (tokens) at four timesteps. The
result slot of pixel `pix` at timestep `ts` (both counted from 0) is
`{ts[1], pix, ts[0]}`, i.e. slots 0..7 are (p0,t0) (p0,t1) (p1,t0) (p1,t1)
(p0,t2) (p0,t3) (p1,t2) (p1,t3).

Pipeline (`vesta_top`): cycle 0 issue and SRAM read; cycle 1 PE module,
adder tree and accumulation; cycle 2 TFLIF, output select, Output SRAM and
SI write. A job of `n_col * n_row * n_seg` passes runs without bubbles and
`done` pulses three cycles after the last issue.

## The four ways the array is used

The adder tree is where the layer types differ (`vesta_adder_tree`).

**WSSL, linear layers.** Weight-stationary spiking linear: a weight column of
512 rows sits across the 512 units (one row element each), the eight PEs of a
unit see the inputs of two tokens at four timesteps, and slot `p` is the sum
of PE `p` over all units. The controller walks down all token pairs before
moving to the next weight column, so one output column is finished at a time.
For the 2048-row MLP2 layer a column is cut into four 512-row segments that
are processed in consecutive passes; their sums are accumulated in the 8 x
24-bit (192-bit) partial-sum buffer (`n_seg = 4`).

**ZSC, convolutions with spike inputs.** Zig-zag spiking convolution: a 2x2
kernel of one input channel occupies four units (W_A1, W_A2, W_B1, W_B2), so
the array covers 128 input channels per pass. Since the kernel is the same at
all timesteps, the eight PEs of a unit hold the inputs that this kernel tap
sees for two vertically adjacent output pixels at four timesteps. In the
second and fourth unit of each group the two inputs of every PE pair are
placed in swapped order; the adder tree undoes the swap (it takes PE `p^1` of
odd units), which is the "zig-zag". Summing over all units also sums over the
input channels; more than 128 channels use several accumulated passes.

For one channel the placement is (row, timestep) per PE:

| unit (weight) | PE1 | PE2 | PE3 | PE4 | PE5 | PE6 | PE7 | PE8 |
|---|---|---|---|---|---|---|---|---|
| 1 (W_A1) | A1,t1 | A1,t2 | A3,t1 | A3,t2 | A1,t3 | A1,t4 | A3,t3 | A3,t4 |
| 2 (W_A2) | A2,t2 | A2,t1 | A4,t2 | A4,t1 | A2,t4 | A2,t3 | A4,t4 | A4,t3 |
| 3 (W_B1) | as unit 1, column B | | | | | | | |
| 4 (W_B2) | as unit 2, column B | | | | | | | |

Output pixel 0 is the patch of rows 1-2, pixel 1 that of rows 3-4.

**SSSC, the 8-bit image convolution.** Shift-and-sum spiking convolution: the
first stem layer reads 8-bit pixels, not spikes. A unit then holds the eight
bits of one pixel (PE1 = MSB), and its two shifter+adder groups form
`w*b7*8 + w*b6*4 + w*b5*2 + w*b4` and the same for bits 3..0; the upper group
is shifted by four and added, giving the exact 8-bit x 8-bit product
(`vesta_pe_unit`). Each half of the array (256 units) is reduced to one
output pixel, and the value is fed to all four timesteps of the TFLIF, since
the image is identical at every timestep.

**STDP, attention.** Spiking tile-wise dot product: rather than storing all of
V, a job computes one column of V as a linear layer and writes its spikes
back into the SI buffer (`si_wb`); the next job multiplies QK^T, held in LW,
with that column read from SI. Only one V column (196 tokens x 4 timesteps =
784 bits) is ever stored. In the adder tree STDP is reduced like WSSL.

## The TFLIF neuron

`vesta_tflif` produces the four spikes of one neuron in a single cycle, so no
membrane potential is stored between passes. With the batch-norm bias folded
into the threshold input (`thr` = threshold minus BN bias):

```
v1 = in1                          v_t = sat8(in_t + carry_{t-1})  (t = 2..4)
spike_t = v_t > thr
carry_t = (spike_t ? 0 : v_t) >>> 1        hard reset, leak by halving
```

Two instances serve the two output pixels of a pass. One threshold is used per
job, so a layer whose channels have different thresholds runs one job per
output channel (or channel group sharing a threshold).

## Requantisation

The adder tree is exact (24 bits). After the last accumulated pass the sum is
shifted right arithmetically by the job's `qshift` and saturated to signed
8 bits, because the TFLIF data path is 8 bits wide. `res_sat` flags a result in
which any slot saturated.

## Buffers and the memory controller

| buffer | words x bits | bytes | use in this RTL |
|---|---|---|---|
| LI | 100 x 4096 | 51,200 | token maps for linear layers (196 x 512 x 4 bits = 98 words) |
| SI | 2 x 4096 | 1,024 | convolution tiles, 8-bit image tiles, the V column |
| LW | 100 x 4096 | 51,200 | linear weights, QK^T, IAND residual spikes |
| SW | 1 x 4096 | 512 | one stationary weight column or 128 2x2 kernels |
| Output | 32 x 64 | 256 | results, written as a ring |

All are single-port with one-cycle read latency (`vesta_sram`, a plain array
that synthesises to memory cells; a real chip would use SRAM macros). The
memory controller (`vesta_mem_ctrl`) gives priority to accesses from inside
the accelerator; a host access is granted (`host_gnt`, same cycle) only if its
target buffer is idle that cycle. So the next tile can be loaded into buffers
the running job does not use. Host reads are allowed only on the Output SRAM;
data returns one cycle later with `host_rvalid`.

## Output select and IAND

Each result is written to the next Output SRAM word (the pointer restarts at
0 with every job and wraps after 32 words) and also appears on
`res_valid/res_data`:

* `OSEL_SPIKE`: the eight spikes in bits 7..0, bit `pix*4 + ts`;
* `OSEL_IAND`: `~residual & spikes`, the IAND residual connection; the
  residual is byte `j mod 512` of LW word `res_base + r` (`j` output column,
  `r` pixel pair), read in the same cycle as the operands, so weights must come
  from SW in this mode;
* `OSEL_RAW`: the eight requantised 8-bit sums.

## Programming a job

`layer_cfg_t` (in `vesta_pkg`) describes one job, started with a one-cycle
`start` while `busy` is low:

```
for j in 0..n_col-1            output column / output channel
  for r in 0..n_row-1          pair of output pixels (tokens)
    for s in 0..n_seg-1        accumulated pass
      weight word = w_base + j*n_seg + s   (LW if w_from_lw, else SW)
      input  word = in_base + r*n_seg + s  (LI if in_from_li, else SI)
```

Other fields: `mode`, `osel`, `qshift`, `thr`, `res_base`, and
`si_wb`/`si_wb_word`, which write the spikes of pixel pair `r` to bits
`8r+7..8r` of an SI word. Reads beyond a buffer's depth return zero. The host
is responsible for placing data in the words as described above and for
tiling layers that exceed the buffers.

## Where this RTL departs from, or goes beyond, the source description

* The shift-and-sum figure draws the SSSC shifts as right shifts (">>3",
  ">>4"); with the MSB in PE1 only left shifts give the product, and left
  shifts are used.
* Descriptor, loop nest, pipeline, reset (asynchronous, active low),
  requantisation, signed 8-bit arithmetic with saturation in the TFLIF, the
  SSSC grouping into two halves, the word layouts, the residual location and
  the memory-controller arbitration are this design's own choices; the
  source gives only the function of these parts.
* SI has 1 KB (two 4096-bit words) instead of 0.78 KB, because 0.78 KB is not
  a whole number of array-wide words. The Output SRAM has 256 bytes against
  0.26 KB.
* Only the batch-norm bias is folded into the threshold; the batch-norm scale
  is expected to be folded into the weights offline. One threshold serves a
  whole job.
* The "raw" output branch is taken after requantisation, not straight after
  the adder tree.
* The adder tree is a single combinational stage; reaching 500 MHz in 28 nm
  would need pipeline registers inside it.
* The off-chip memory itself is not modelled; its side of the memory
  controller is the `host_*` port.
* How STDP lays out QK^T and V across units is not specified; the datapath
  supports it as a WSSL-style reduction, and the layout is left to the
  software.

## Expected performance at the default size

512 units x 8 PEs = 4096 spike operations per cycle. One 512x512 linear
layer over 196 tokens takes 512 x 98 = 50,176 cycles; an encoder block with
four such layers, a 512->2048 and a 2048->512 layer takes about 602k cycles,
eight blocks about 4.8M cycles. If, as reported for this architecture, linear
layers are about 81% of the run time, a frame takes roughly 6M cycles, about
12 ms at 500 MHz. This estimate ignores off-chip transfer stalls.

## Files

`rtl/`: `vesta_pkg` (types, slot order, saturation), `vesta_pe_block`,
`vesta_pe_unit`, `vesta_pe_module`, `vesta_sum_tree` (balanced adder tree),
`vesta_adder_tree`, `vesta_psum_buffer`, `vesta_tflif`, `vesta_out_select`,
`vesta_sram`, `vesta_mem_ctrl`, `vesta_sys_ctrl`, `vesta_top`.

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Each ends by
printing `TB_RESULT checks=N failures=M`. `tb_vesta_top` runs the complete
accelerator at its default size (512 units): it loads the buffers, runs a ZSC,
an SSSC, three WSSL jobs (one with four accumulated segments, one producing a
V column with IAND output and SI write-back) and an STDP job. It compares
every result with a behavioural model, checks job latency and the Output SRAM
contents, and counts each mechanism.

`tb_vesta_layers` checks the arithmetic of whole layer tiles at the default
size against plain matrix products and direct convolutions, which know
nothing of the word layouts: a 512-row linear layer with 4 output columns
over all 196 tokens, a 2048-row (MLP2-like) layer accumulated over four
segments, a 128-channel spike convolution on 8x8 maps (ZSC) and a
3-channel 8-bit image convolution (SSSC). It also shows how a host has to lay
out operands for each mode.

## Simulating

With Verilator 5, naming the package and the testbench and letting `-y rtl`
find the modules:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_vesta_top \
    rtl/vesta_pkg.sv tb/tb_vesta_top.sv -o sim
./obj_dir/sim
```

Replace `tb_vesta_top` by any other testbench name. The full-size top-level
test builds in about 20 s and runs in well under a minute. To change the
array size, set `UNITS` on `vesta_top` (a multiple of 4 so ZSC groups are
complete; even so SSSC halves are equal) together with the `U` localparam of
the top-level testbench.
