# A spiking-transformer accelerator with all time steps in parallel

Spiking neural networks run every layer for several time steps, and the
neuron of step t depends on its membrane potential from step t-1. Processing
the steps one after another costs latency, repeated weight fetches and a
membrane-potential memory. This design removes all three for a spiking vision
transformer whose residual additions are replaced by IAND (`x AND NOT s`), so
every layer takes and produces 0/1 spikes only:

* **Parallel tick batching.** Spike x weight has no dependency between time
  steps, so each PE block holds one PE array per time step (four), all fed the
  same weight word. A weight word is fetched once for all four steps.
* **Unrolled LIF.** The four accumulator results of an output column arrive
  together, so the leaky integrate-and-fire recurrence is evaluated in one
  combinational chain over the four steps; no membrane is stored. Three
  selectors cut the chain to run 4, 2 or 1 time steps per sample.
* **One vector data flow for three layer types.** The 8x9 PE array computes a
  3x3 convolution (diagonal accumulation) or a 1x1 convolution / matrix
  product (row accumulation), one 8-element output column per cycle.

## Block structure

```
 memory controller side (ports)                       spike_iand_former_acc
   |         |          |             |
 weight_sram spike_sram bias_sram  spike_temp_sram <---------------------+
 (2x54KB)    (2x6.75KB) (0.25KB)   (2x6.75KB)                            |
   | 864b      | 3456b     | 8b       | 3456b (next-layer input)        |
   +-----------+-----------+----------+                                  |
               v                                                         |
     12 x pe_block  (each 4 x pe_array of 8x9 pe)          sys_ctrl      |
               | 12 x 4 x 8 x 9b                                          |
     4 x accumulator (one per time step) <-> 4 x temp_sram (128 x 8x9b)  |
               | 4 x 8 x 9b                                               |
     lif_unrolled (8 neurons x 4 steps) -> partial_iand -- 8x4 spikes ----+
```

Pipeline (all in `rtl/spike_iand_former_acc.sv`): S0 the controller issues
reads; S1 the PE blocks compute on the SRAM outputs; S2 the accumulators add
the 12 blocks, the stored partial sum and (last group) the bias, and write the
partial sum back; S3 LIF, IAND and a segment write into the output buffer.
There are no stalls: one column per cycle. A layer of `n_out` output channels
and `n_groups` input groups takes `n_out * n_groups * 9` cycles in 3x3 mode
(8 columns + one flush column per group) or `* 8` in 1x1 mode, plus 4 cycles
of pipeline drain before `done`.

## The PE array data flows

PE (r, j) adds `spk ? w : 0` to the partial sum of a neighbour or 0.

* **1x1 / matrix mode.** Row r of PE column j gets spike r of input channel j
  and weight j; sums run left to right, so the array reduces nine input
  channels of one 8-row column per cycle. A spike word holds one column of
  108 input channels (9 per block x 12 blocks).
* **3x3 mode.** One input column (8 spikes) is broadcast along the rows. The
  nine PE columns are three 8x3 sub-arrays, one per kernel column kx, with
  weight index `j = 3*kx + ky`. Within a sub-array the chain runs diagonally,
  PE(r, ky) -> PE(r+1, ky+1), so sub-array kx yields
  `P_kx[o] = sum_ky x[o+ky-1] * w[3kx+ky]` with zeros above and below the
  8-row tile. Two registers per row join consecutive columns,
  `out(c) = P_0(c-1) + P_1(c) + P_2(c+1)`; the first column of a group gives
  no output and a zero flush column pushes out the last one. A spike word
  holds 8 columns of 12 input channels (one per block).

Partial sums saturate to 9 bits at the PE-block output and at the
accumulator, the width shown in the source architecture. Nine signed 8-bit
products need 12 bits, so real weights must be scaled to stay in range; the
width is the parameter `PSUM_W` in `snn_pkg`.

## Unrolled LIF

For each of 8 neurons: `V1 = acc1`, `Vt = acct + carry`, spike when
`Vt >= vth`; `carry = Vt >>> 2` (leak 0.25) unless the neuron fired (hard
reset to 0) or the selector between t and t+1 is 0. Selectors `tsel`
(t1-t2, t2-t3, t3-t4) are `111` for four time steps, `101` for two samples of
two steps and `000` for four single-step samples. The membrane is 10 bits,
enough for `acc + V/4`. `vth` is a run-time value in the partial-sum scale.

## Buffers, banks and address maps

Weight, spike and spike-temp buffers are ping-pong pairs; the total
(2x54 + 2x6.75 + 2x6.75 + 0.25 + 4x1 KB) is 139.25 KB. While a layer runs the
core uses the banks named in its latched configuration; while idle the banks
follow the `cfg` port, and the outside ports always reach the other bank.
Word layouts (`snn_pkg`): a spike word is 108 segments `seg[block*9+j]` of
`[t][row]`; a weight word holds weight j of block b at bits `(b*9+j)*8`.
Addresses: spike word `spk_base+g` (3x3) or `spk_base+8g+col` (1x1); weight
word `w_base + oc*n_groups + g`; bias `oc`. Outputs are stored for the next
layer's flow: 3x3 layout word `out_base + oc/12`, segment `(oc%12)*9+col`;
1x1 layout word `out_base + 8*(oc/108) + col`, segment `oc%108`.
With `src_temp` a layer reads its input from the output buffer bank not being
written, so layers chain on chip. With `iand` the stored word is read before
the write and the new spikes s become `x AND NOT s`, x being the residual
preloaded there. With `bitplane` (encoding layer for 8-bit pixels) group g is
bitplane `g mod 8` and its sum is weighted by `2^(g mod 8)`.

## Where this departs from, or adds to, the source design

* The memory controller and off-chip memory are not built; their side of
  every buffer is a port of the top.
* The controller, pipeline, address maps, bank roles, word layouts, the
  3x3 column combiner, saturation and the IAND read-modify-write are this
  design's own choices where the source gives only block names and widths.
* The temp SRAM is 128 words x 72 bits (1.125 KB, not 1 KB); only the 8
  column addresses of an 8x8 map are used.
* Feature maps taller than 8 rows (the tokenizer's first layers) need halo
  rows between tiles; that is not built. A layer larger than one bank of
  weights must be split by the host.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`, for example

```
verilator --binary --timing --assert -Irtl -Itb rtl/snn_pkg.sv tb/tb_pe_array.sv --top-module tb_pe_array
./obj_dir/Vtb_pe_array
```

`tb/tb_top.sv` runs four layers (3x3 with T=4 and two groups, 3x3 chained
on chip with T=1, 1x1 with IAND and T=2, and an 8-bitplane encoding layer with
saturation) on the full-size core and compares every output word with its
own reference model and every layer's cycle count. The full-size core has
3456 PEs and 3456-bit buffer words; its C++ build takes long (well over ten
minutes on a desktop machine), and this test has not been run to completion.
The block testbenches are small and fast.
