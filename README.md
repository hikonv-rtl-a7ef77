# HiKonv: many low-bitwidth convolution terms from one wide multiplication

A DSP block on an FPGA contains a 27 × 18-bit signed multiplier. Used for
4-bit × 4-bit products, almost all of its width is wasted. HiKonv puts several
low-bitwidth values into each operand, spaced S bits apart. The single wide
product then holds the whole short convolution of the two sequences. Each
S-bit field of the product holds one convolution output:

    A = Σ_n w[n]·2^(S·n)          B = Σ_k f[k]·2^(S·k)
    A·B = Σ_m y[m]·2^(S·m),       y[m] = Σ_{n+k=m} w[n]·f[k]

With the default 4-bit signed data, one multiplication of 3 weights by
2 features gives 4 outputs. That is 6 multiplications and 2 additions, which
the literature counts as 8 operations per DSP per clock. With binary data
the same multiplier gives 60 operations.

This repository holds synthesizable SystemVerilog for the hardware side of
the method:

- a convolver that uses a single DSP;
- an engine for 1-D convolutions of any length;
- an M-lane unit for DNN layers;
- a top level that puts the three behind one stream interface.

Each piece has a self-checking testbench, and one more testbench runs the
data formats the method was evaluated with.

## Slices and guard bits

A slice is the S-bit field that holds one element of a packed operand. For
p-bit and q-bit data, S has to hold the widest output segment, which is a sum
of products:

    S = p + q + Gb        (S = q + Gb if p = 1, S = p + Gb if q = 1)

The guard bits Gb depend on how many products are summed into one segment.

| use | guard bits | default S (p = q = 4) |
|---|---|---|
| one multiplication, `hikonv_convolver` | ceil(log2 min(KW, NF)) | 9 |
| 1-D convolution, `hikonv_conv1d` | ceil(log2 KW) | 10 |
| DNN layer with M lanes summed, `hikonv_conv2d` | ceil(log2(M · min(KW, NF))) | 11 (M = 4) |

Here KW is the number of weights in the 27-bit operand and NF the number of
features in the 18-bit operand. All three fit the DSP:

- A needs WB + (KW−1)·S bits, at most 27. For the DNN unit that is 4 + 2·11 = 26.
- B needs FB + (NF−1)·S bits, at most 18. For the DNN unit that is 4 + 11 = 15.

The functions live in `hikonv_pkg`. Each engine's `S` parameter takes its
default from them, so changing `WB`, `FB`, `KW`, `NF` or `M` re-derives the
slice size.

KW and NF are the largest counts that fit the multiplier. The table shows the
best choices for a 27 × 18 multiplier, found by searching every (KW, NF) pair
under the constraints above. "ops" counts multiplications plus additions per
multiplication.

| p = q | KW × NF | S | ops |
|---|---|---|---|
| 1 | 9 × 4 | 3 | 60 |
| 2 | 5 × 3 | 6 | 23 |
| 4 | 3 × 2 | 9 | 8 |
| 6 or 8 | 2 × 1 | 12 or 16 | 2 |

The RTL defaults are the 4-bit row. The testbench `tb_hikonv_workloads`
overrides the parameters to run the other rows.

## Signed packing: the packing decrementers

With unsigned data, packing is just concatenation. With signed data, a
negative element implicitly subtracts 1 from everything above it, because its
sign extension is all ones. The packed operand must therefore hold:

    slice 0 = w[0]
    slice n = w[n] − (bit S·n − 1 of the operand), n > 0

The bit subtracted in slice n is the MSB of slice n−1, after slice n−1's own
correction.

`hikonv_packer` builds this as a chain of small subtractors:

- Each slice subtracts a single borrow bit from the sign-extended element.
- Only the low S bits of the result go into the slice, except in the top slice.
- The top slice keeps every bit up to the operand's MSB, so the operand's sign
  comes out right.

The chain is combinational. A testbench checks every 4-bit input combination
against the arithmetic sum Σ w[n]·2^(S·n).

The DSP48E2 pre-adder could absorb one of these subtractors. This design does
not use it, so the multiplier stays a plain `a*b` (`hikonv_dsp_mult`, one
register stage). Synthesis maps that onto a DSP.

## Output split: the split incrementers

Reading the product back is the mirror image of packing. A negative segment
m−1 has lent 1 to every segment above it. The true output is the field plus
the bit just below it:

    y[0] = Prod[S−1:0]                       (signed)
    y[m] = Prod[S(m+1)−1 : S·m] + Prod[S·m − 1]

Each y is S+1 bits wide. The extra bit is needed because the field plus carry
can reach 2^(S−1), which does not fit in S signed bits.

The top segment is wider. It takes every remaining product bit up to the MSB.
`hikonv_splitter` implements this for any number of segments. With
`SIGNED = 0` the carry term and the sign extension both drop out.

## The single-DSP convolver

`hikonv_front` is the front end that every engine shares. It has three
register stages:

1. input registers for the compact weight and feature sequences;
2. the two packers, feeding the multiplicand registers;
3. the DSP multiplier.

`hikonv_convolver` adds the splitter and an output register. It returns all
NF+KW−1 partial convolution outputs 4 clocks after the input, and takes a new
input every clock.

The inputs are compact sequences: element i of `w_seq` is bits
`[i*WB +: WB]`. This is the "compressed" storage form, where only the
quantized bits are kept.

## Arbitrary-length 1-D convolution: the shift-add register

A sequence longer than NF features is fed NF features per clock, in chunks,
with the same KW-weight kernel each time. Chunk x produces the partial
convolution of its own features. The outputs of consecutive chunks overlap by
KW−1 positions.

`hikonv_shift_add` keeps the running sum in packed form:

    acc ← prod + (acc >>> NF·S) + acc[NF·S − 1]      (acc ← prod on the first chunk)

- The low NF segments of `acc` are then final. They are the outputs
  y[x·NF .. x·NF+NF−1], and they go through the split incrementers.
- The upper segments are partial sums. The arithmetic shift moves them down
  to line up with the next product.
- The added bit `acc[NF·S−1]` is the same borrow correction as in the splitter.
  When the low part is negative, the upper part of `acc` reads one less than
  its true value. Adding the bit restores the exact sum, so no error builds up
  over a long sequence.

The register is one bit wider than the product.

`hikonv_conv1d` is the front end, this register and an NF-segment splitter.
Outputs appear 5 clocks after their chunk. Raise `in_first` with a
sequence's first chunk. To collect the last KW−1 outputs, feed
ceil((KW−1)/NF) zero chunks.

## DNN layers: lanes and the intermediate adder

A K × K convolution layer is a sum of 1-D row convolutions:

    O[co][h][w] = Σ_ci Σ_kh (row I[ci][h+kh] ⊛ reversed W[co][ci][kh])[w+K−1]

`hikonv_conv2d` runs M of these row convolutions at once. Each of its lanes
has a front end and a shift-add register. An intermediate adder sums the M
accumulators while they are still packed, into a registered sum. A single
splitter then unpacks that sum. This needs one set of incrementers instead of
M. It works because the guard bits were widened to cover the M-way sum.

Any M (ci, kh) pairs can share a step. Pairs beyond M, and the final pick of
output w + K − 1, are left to the consumer. The top-level testbench computes a
full 3 × 3 layer this way, with 4 input channels, 2 output channels and an
8 × 8 input, and compares it with a direct six-loop convolution. Latency is
6 clocks.

## The top level: `hikonv_top`

The top holds one of each engine:

- The single convolver and the 1-D engine use lane 0 of the input.
- The DNN unit uses all M lanes.

It has one valid/ready input stream, with `mode`, `in_first`, `w_seq[M]` and
`f_seq[M]`, and one output port with these signals:

- `out_mode` says which engine produced the result.
- `out_count` says how many `out_y` entries are valid: NF+KW−1 in single mode,
  NF otherwise.
- `out_first` marks a first chunk.
- `out_y` is the results, all YW = 12 bits wide.

The three engines have different latencies, so a change of mode could make
two engines' results collide. To prevent this, `in_ready` drops while a
different mode is requested and the previous mode still has results in
flight. Within one mode, the top accepts an input every clock. Assertions
check that at most one engine's output is valid in any clock, and that mode 3
is never used.

The shared stream, the hold-off rule and the shared output port are choices
of this design. The method itself describes the three engines separately.

## Where this RTL departs from the method's description, or fills gaps

- **Latency.** The reference convolver reports 2 clocks. Here it is 4:
  registered inputs, registered multiplicands, the DSP register and
  registered outputs. The extra stages are for timing. Throughput is still one
  multiplication per clock.
- **Top slice.** The packing figure shows equal slices. Here the top slice of
  each operand, and the top product segment, run to the MSB, so the value's
  sign is right whatever the port width.
- **Bit ranges.** The convolver diagram labels the third output field
  `Prod[3S−1:2S]` after `Prod[2S−1:S]`. The RTL uses the formula
  `Prod[S(m+1)−1:S·m]` for every m.
- **DNN guard bits.** The formula uses min(KW, NF). The number of products
  that actually meet in one segment of the 1-D accumulator is M·KW, which is
  12 at the defaults.
  - With signed 4-bit data the worst case, 12 · 64 = 768, fits S = 11.
  - With unsigned 4-bit data it does not: 12 · 225 = 2700 > 2047.
  - So `hikonv_conv2d` at the default S should be used with signed data, or
    given a larger `S` for unsigned data. The 1-D engine's ceil(log2 KW) rule
    has no such gap.
- **1-bit slice size.** The method states S = 4, N = 9, K = 4 for 1-bit data on
  27 × 18. Its own slice rule gives S = 3, and only S = 3 makes 9 × 4 values
  fit. The RTL's binary configuration uses S = 3.
- **1-bit count on 32 × 32.** The stated figure is 128 operations. The same
  search gives 113, with 8 × 8 values and S = 4.
- **6-bit 1-D convolution on 32 × 32.** The search allows 3 × 2 values with
  S = 13, which fills the 32-bit operand exactly. A signed top slice needs
  one spare bit for its borrow, so that packing does not fit. The 32-bit
  6-bit configuration here uses 2 × 2 values instead.
- **Not built.**
  - the offline weight compression step (the RTL takes already compact
    sequences);
  - the system around the accelerator: the UltraNet dataflow, buffers, DDR
    transfers and the ARM host;
  - the CPU software version.
- **Reset.** Only the valid/first flags have an asynchronous active-low reset.
  Data registers have none.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 4 | DNN lanes (input-channel × kernel-row pairs summed per clock) |
| `KW` | 3 | weights per multiplication, in the 27-bit port |
| `NF` | 2 | features per multiplication, in the 18-bit port |
| `WB`, `FB` | 4, 4 | weight and feature bit width |
| `SIGNED` | 1 | two's-complement data; 0 removes decrementers and incrementers |
| `S` (per engine) | 9 / 10 / 11 | slice size, from the guard-bit rules above |
| `A_W`, `B_W` | 27, 18 | multiplier port widths; set them to 32 for the 32-bit-multiplier configurations |

Each engine checks its own packing at elaboration:

- S ≥ element width + 1 for signed data;
- the packed operands fit the multiplier ports.

## Files

| file | content |
|---|---|
| `rtl/hikonv_pkg.sv` | constants, mode enum, guard-bit and slice-size functions |
| `rtl/hikonv_packer.sv` | packing decrementers |
| `rtl/hikonv_dsp_mult.sv` | registered signed multiplier (one DSP) |
| `rtl/hikonv_splitter.sv` | split incrementers |
| `rtl/hikonv_front.sv` | input registers, packers, multiplier |
| `rtl/hikonv_convolver.sv` | single-DSP convolver |
| `rtl/hikonv_shift_add.sv` | shift-add register |
| `rtl/hikonv_conv1d.sv` | 1-D convolution engine |
| `rtl/hikonv_conv2d.sv` | M-lane DNN-layer unit |
| `rtl/hikonv_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_hikonv_workloads.sv` | the evaluated data formats and multiplier sizes |
| `tb/hikonv_conv_check.sv`, `tb/hikonv_conv1d_check.sv`, `tb/hikonv_conv2d_check.sv` | checkers used by the workload testbench |

## Verification

Every testbench is self-checking:

- It compares each output with values computed directly, from plain loops
  over integers.
- It checks the latency where one is defined.
- It prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it checks | checks |
|---|---|---|
| `tb_hikonv_packer` | every 4-bit input combination | about 12,000 |
| `tb_hikonv_top` | all three modes at default parameters (see below) | 3,307 |
| `tb_hikonv_workloads` | 15 configurations (see below) | 27,557 |

`tb_hikonv_top` runs the top at its default parameters. It covers:

- single-mode inputs;
- two 1-D sequences;
- the full 3 × 3 DNN layer;
- then mixed modes.

It counts each mechanism and fails if any of them never happened:

- mode changes and hold-off cycles;
- first chunks and drain chunks;
- negative outputs.

`tb_hikonv_workloads` covers these configurations:

- on 27 × 18: P6Q6, P4Q4, P2Q2 and binary;
- on 32 × 32: 4-bit, and 1-D convolution for 1, 2, 4, 6 and 8 bits;
- the binary DNN-layer unit with M = 2, 4, 8 and 16 lanes. The slices are
  S = 4, 5, 6 and 7, so 28, 16, 15 and 12 binary MACs fit in one
  multiplication. Each added lane costs guard bits;
- the worked example [11, 9, 7] ⊛ [3, 2]. The testbench checks the packed
  operands 11543559 and 3074, the product 35484900366, and the outputs
  14, 39, 49, 33.

Each module testbench was also run against a copy of its module with one
deliberate bug, and reported failures every time. Examples of the bugs:

- the borrow tied to 0;
- the carry dropped;
- the wrong shift;
- one lane left out of the adder.

To simulate one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps --top-module tb_hikonv_top \
        -y rtl -y tb +libext+.sv rtl/hikonv_pkg.sv tb/tb_hikonv_top.sv
    ./obj_dir/Vtb_hikonv_top

Replace the top module and the testbench file to run any other testbench.
Every run finishes in seconds.
