# MixDiT accelerator RTL: mixed-precision MX GEMM for diffusion transformers

Diffusion transformers (DiT) spend most of their inference time in GEMMs. In
their activations, a few channels (in linear layers) and a few heads (in
attention) carry values far larger than the rest. If every activation is
quantised to the 6-bit microscaling format MX6, these outliers ruin image
quality. MixDiT fixes this offline. Activation channels are reordered so that
the large-magnitude ones sit together. Those channels (or heads) are stored
in MX9 and everything else in MX6. Weights stay in MX6. The hardware needs
two things for this:

* a multiplier that runs MX6 x MX6 four times faster than the MX9 cases, so
  the mostly-MX6 GEMMs really run faster;
* a way to write each layer's output already reordered and quantised in the
  next layer's mixed format, so nothing has to be reshuffled off-chip.

This repository holds synthesizable SystemVerilog for that accelerator. It
has systolic arrays of precision-flexible processing elements (PEs), an
output-channel reordering controller and an MX converter, together with
self-checking testbenches. The structure, the MX format, the PE's
multiplier and its cycle counts follow the published MixDiT design. Most
other details are this implementation's own choices, listed in
"Departures and own choices" below.

## 1. The MX6 / MX9 formats used everywhere

An MX *group* is 16 values that share one 8-bit exponent `E`. The group is
split into 8 *subgroups* of 2 values. Each subgroup has a 1-bit
*microexponent* `mu`. Each value has a sign bit and an unsigned mantissa of
M = 4 bits (MX6) or M = 7 bits (MX9). That comes to 6 or 9 bits per value
on average:

    value[i] = (-1)^sign[i] * mant[i] * 2^(E - 127 - mu[i/2] - (M-1))

A mantissa whose top bit is set therefore lies in [1, 2) times
2^(E-127-mu). Setting `mu = 1` gives a subgroup of small values one extra
bit of resolution. `mixdit_pkg::mx_group_t` holds a group: a format bit, `exp`,
`mu[7:0]`, `sign[15:0]` and sixteen 7-bit mantissas (an MX6 mantissa uses the
low 4 bits). Operand buffers store MX6 and MX9 groups at this same width.

## 2. The precision-flexible PE (`mx_pe`)

This is the core of the design. A PE has four unsigned 4x4-bit multipliers.
Each cycle it takes one *beat* (`pe_beat_t`) of activations and one of
weights.

* **Narrow mode (MX6 x MX6).** A beat carries four elements per operand, one
  per multiplier. The four products are summed, so a 16-element group dot
  product takes **4 cycles**.
* **Wide mode (MX6 x MX9 or MX9 x MX9).** The four multipliers act as one
  8x8 multiplier. Split the zero-extended mantissas into nibbles,
  a = aH:aL and w = wH:wL. Then

      s1 = (aH*wH << 4) + aH*wL      s2 = (aL*wH << 4) + aL*wL
      a*w = (s1 << 4) + s2

  A beat carries one element, so a group takes **16 cycles**. In MX6 x MX9
  the 4-bit operand simply has aH = 0.

Multiplexers select between the shifted partial products (wide mode) and the
plain ones (narrow mode). Every product is shifted left by
`2 - mu_a - mu_w` and signed by `sign_a ^ sign_w`. The products of a group
are summed as integers (`gsum`). On the group's last beat, `gsum` is scaled
by the group's exponent:

    2^(Ea + Ew - 254 - 2 - (Ma-1) - (Mw-1))

and added into the PE's accumulator. Each K-group can have different
exponents and formats, so the accumulator is a small floating-point number
(`acc_t`: a 32-bit signed mantissa `m` and a 12-bit exponent `e`, value
m*2^e). It is renormalised on every add (`acc_add`, `acc_norm` in
`mixdit_pkg`). The result has about 29 significant bits. Results leave the
array as IEEE binary32 words, truncated, with denormals flushed to zero.

Timing: there are no stalls. The accumulator is updated on the clock edge
that consumes the last beat of a group. `clear` zeroes it.

## 3. Array and tile (`mx_systolic_array`, `sa_tile`)

`mx_systolic_array` is a 16x16 grid of PEs with an output-stationary
dataflow. Row i of activation beats enters from the left, delayed by i
cycles. Column j of weight beats enters from the top, delayed by j cycles.
Each PE passes beats right and down through a register. So PE(i,j) computes
C(i,j) = sum over k of A(i,k)*W(k,j) for 16 tokens x 16 output channels.

Draining takes 17 cycles in all. A pulse on `drain_start` copies every
accumulator into a per-PE output register. For the next 16 cycles the
columns shift down. One binary32 row per cycle comes out at the bottom,
row 15 first.

`sa_tile` is one complete array unit:

* an A buffer and a W buffer (`operand_buffer`; one MX group per array row
  or column per K-group, 32 K-groups deep);
* a group sequencer;
* the array;
* an O buffer bank (`o_buffer`; two slots of 16x16 binary32).

A command (`start`, `n_groups`, `clear`, `drain`, `slot`) runs K-groups
0..n-1 back to back:

* The format bit of the K-group's row-0 activation and column-0 weight
  selects narrow (4 beats) or wide (16 beats) issue. Every lane of a K-group
  shares its format, because the offline reordering assigns one format per
  channel group or per head.
* The next buffer word is prefetched on the last beat, so there are no
  bubbles between groups.
* After the last beat, the sequencer waits 32 cycles for the skewed
  wavefront to leave the array.
* If `drain` is set, it then drains into the chosen O buffer slot.

`busy` lasts exactly:

    1 + 1 + sum over K-groups (4 or 16) + 32 + 1    (+ 17 with drain)

Without `clear`, results add onto the previous command. This is how a K
dimension longer than the 32-group buffers (512 channels) is handled: load
the next K chunk and run again.

## 4. Reordering and conversion (`reorder_controller`, `mx_converter`)

The next layer wants its input channels in the order fixed offline:
outlier channels (or heads) first, in MX9 groups, and the rest in MX6. The
reordering controller keeps a table of N_CTX contexts, one per (layer,
timestep). Each context holds the channel to place at every output position
k, and the format of every 16-position group. The host writes the table
through `cfg_*`.

A reorder command (`ctx`, `slot`, `n_tok`, `n_grp`) walks the tokens and,
for each token, the output groups. For a group it issues 16 single-channel
reads, one per cycle. Channel c is in the O buffer bank of array c/16, at
column c%16. When the 16 values are in, it offers them with the group's
format to the MX converter. A group takes 17 cycles plus any wait on
`out_ready`.

`mx_converter` is purely combinational:

* The shared exponent is the largest binary32 exponent in the group.
* A subgroup whose largest exponent is smaller than the shared exponent gets
  `mu = 1`.
* Each mantissa is the top M bits of the 24-bit significand, shifted right
  by `E - mu - e_i`, and truncated.

Small values that share a group with a large one therefore lose low bits.
This loss is why the offline reordering groups outliers together.

## 5. Top level (`mixdit_top`)

`NUM_ARRAYS` tiles share one reordering controller and one MX converter.
Off-chip memory is not part of the RTL. Its traffic is two streams:

* **Load (`ld_*`)**: one MX group per cycle into a tile's A or W buffer. An
  A load with `ld_bcast` goes to every tile. All tiles work on the same 16
  tokens, and tile t holds the weights of output channels 16t..16t+15.
* **Store (`out_*`, valid/ready)**: one converted MX group per handshake,
  tagged with its token (`out_tok`) and its group index (`out_gidx`).

Commands:

1. Write the reorder table (`cfg_ch_we`: position -> channel; `cfg_prec_we`:
   group -> MX6/MX9).
2. Load A and W. Pulse `cmd_start` with `cmd_n_groups`, `cmd_clear`,
   `cmd_drain` and `cmd_slot`. All tiles run in lock step; `cmd_done` pulses
   at the end.
3. Pulse `ro_start` with `ro_ctx`, `ro_slot`, `ro_n_tok` (at most 16) and
   `ro_n_grp` (output channels / 16). Collect groups on `out_*` until
   `ro_done`.

The O buffer has two slots. The reorder of one output tile can therefore
overlap the compute and drain of the next. Operands for the next command
must be loaded while no compute is running. `perf_wide_groups` counts the
K-groups issued in wide mode, and `perf_out_stalls` counts the cycles an
output group waited.

Peak rate: 16x16 PEs x 1024 arrays x 2 ops x 500 MHz = 262 TOPS when every
group has an MX9 operand (the published peak). MX6 x MX6 is four times that.

## 6. Sizes

| parameter | RTL default | published | note |
|---|---|---|---|
| array size `SA_DIM` | 16x16 | 16x16 | |
| arrays `NUM_ARRAYS` | 32 | 1024 | see below |
| group / subgroup | 16 / 2 | 16 / 2 | |
| operand buffer depth `KG_MAX` | 32 K-groups | — | 2x16x32x145 bit = 18.1 KiB per array |
| O buffer | 2 slots x 16x16 x 32 bit | — | 2 KiB per array |
| reorder contexts `N_CTX` | 4 | — | table is reloaded by the host |

The published design has 28 MB of on-chip memory for 1024 arrays, about
28 KiB per array. The per-array buffers chosen here (about 20 KiB) fit in
that budget.

`NUM_ARRAYS` is 32 rather than 1024 because Verilator's lint of the top
needs about 137 MB per array (measured at 16, 32 and 64 arrays). 1024 arrays
would need about 140 GB. 64 arrays (about 9 GB) were killed for memory when
they ran beside synthesis jobs on a 32 GiB machine; 32 arrays (about 4.4 GB)
leave room for them. Set `NUM_ARRAYS` back to 1024 for a synthesis flow
that can take it. Nothing else in the RTL depends on the count.

Workload fit at the defaults: one reorder walks only the channels in the
O buffers at that moment, 16 x NUM_ARRAYS = 512 of them. The published
models need wider rows (the sizes below are standard model sizes, not taken
from the paper):

* DiT-XL and PixArt-Sigma: hidden size 1152; 4608 FFN channels.
* SD3: hidden size 1536; 6144 FFN channels.

Their FFN outputs must be reordered as a whole before the second FFN
layer. At 32 arrays that does not fit in one pass, and neither do the
1152- or 1536-channel hidden outputs; at the published 1024
arrays (16384 channels) it does. Token count and K dimension are not
limited: tokens go 16 per pass, and K is split over accumulating commands.

## 7. Departures and own choices

Taken from the published design:

* the block set: off-chip memory, MX converter, reordering controller, and
  systolic arrays with A/W/O buffers;
* 16x16 arrays, 1024 of them, a group of 16 and a subgroup of 2;
* the MX6 and MX9 field widths;
* four 4-bit multipliers per PE that fuse into one 8-bit multiplier;
* 4 cycles per MX6 x MX6 group and 16 per group with MX9;
* a table of channel order per layer and timestep;
* a combinational MX converter whose shared exponent is the group's largest
  exponent.

Chosen here (the published text does not specify them):

* Output-stationary dataflow, input skew and the drain by column shift.
* The multiplier's nibble assignment. The published PE figure draws the
  alignment shifts as right shifts. Here the more significant partial
  product is shifted left, which gives the same integer and drops no bits.
* The sign and microexponent handling in the PE.
* The floating accumulator and binary32 as the output-buffer format.
* The microexponent rule, truncation rounding and exponent bias in the
  converter.
* The group sequencer and its fixed overheads.
* The command and stream interfaces, activation broadcast and the channel
  split over tiles.
* Two O buffer slots, and the table's per-group format bits.
* A reorder rate of one channel read per cycle. The published design only
  says the reorder latency is hidden behind the arrays. Here that holds when
  a compute takes at least as long as reordering its 16 tokens
  (16 x n_grp x 18 cycles).
* The number of arrays is reduced (section 6).

Not modelled: the off-chip memory, and the offline choice of channel order
and of the MX9 fractions p1 and p2 (software).

## 8. Files and simulation

`rtl/` holds one module or package per file:

* `mixdit_pkg.sv` has the types and the accumulator helpers.
* The modules are `mx_pe`, `mx_systolic_array`, `operand_buffer`,
  `o_buffer`, `sa_tile`, `reorder_controller`, `mx_converter` and
  `mixdit_top`.

`tb/` holds one self-checking testbench per module (`tb_<module>.sv`) and
`tb_mx_pkg.sv`. That package has the reference arithmetic in `real`: MX and
binary32 decoding, dot products, and error bounds. Each testbench prints
`TB_RESULT checks=N failures=M`. Each has a watchdog. Where a cycle count
is fixed, it is checked: 4 or 16 cycles per group, tile busy time, and
18 cycles per reordered group.

Example, for the end-to-end test (4 arrays, about 1 s):

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/mixdit_pkg.sv tb/tb_mx_pkg.sv tb/tb_mixdit_top.sv --top-module tb_mixdit_top -o sim
    ./obj_dir/sim

The two packages are listed first because they must be compiled before the
modules that import them. Verilator finds every module through `-y`.
Replace `tb_mixdit_top` with any other `tb_<module>` to run a single block.

`tb_mixdit_top` does the following:

* loads random operands, with K-groups randomly MX6 x MX6, MX6 x MX9 or
  MX9 x MX9;
* computes one tile with clear;
* computes a second tile that accumulates onto the first, while the first
  is reordered and converted under random backpressure;
* reorders the second tile with another context;
* checks every output value against the exact product, allowing one
  mantissa step of error;
* checks that each mechanism happened at least once: narrow and wide
  groups, accumulation, compute/reorder overlap, output stall, and MX6 and
  MX9 output groups.

No testbench runs the top at its default 32 arrays. The largest size
simulated end to end is 4 arrays. The tiles are identical and run in lock
step, which an assertion checks.
