# Fixed-point near-memory processing unit for an analog in-memory computing tile

An analog in-memory computing (AIMC) tile performs a matrix-vector multiply
inside a crossbar of phase-change memory (PCM) devices. Each crossbar column
ends in an analog-to-digital converter (ADC). In the tile modelled here there
are 256 ADCs, and each one gives two 10-bit unsigned codes: one for the
positive bit-line current (P) and one for the negative bit-line current (N).
No two ADCs convert quite alike, so every column needs an *affine correction*
(a scale and an offset). The same scale and offset can also carry batch
normalisation (BN) and drift compensation. A CNN layer then needs a ReLU
on top.

This RTL is a small fixed-point unit, the NMPU (near-memory processing unit),
that does all of this for one column per clock cycle:

    out = ReLU( P x scale_p / 2^shift_p  -  N x scale_n / 2^shift_n  +  offset )

The unit is small enough that one NMPU serves four adjacent ADC columns, so
64 NMPUs post-process the whole 256-column tile in 4 cycles. A single shared
floating-point unit (FP16) would process the columns one after another
instead. The design follows the architecture called *ArchA* in "A
Precision-Optimized Fixed-Point Near-Memory Digital Processing Unit for
Analog In-Memory Computing" (Ferro et al., 2024). That work gives the
datapath and its formats. The control and configuration interfaces here are
this design's own.

## Number formats

`(I,F)` means I integer bits and F fractional bits.

| quantity | format | notes |
|---|---|---|
| ADC code, P and N | (10,0) unsigned | one pair per column |
| scale_p, scale_n | (1,7) unsigned | the measured correction factors lie in 0.88 .. 1.17; 2^-7 gives steps of about 1 % |
| shift_p, shift_n | 2-bit unsigned, 0..3 | right shift after the multiply |
| offset | (7,1) two's complement, 8 bits | range -64 .. +63.5 |
| output | (8,0) two's complement | -128 .. 127, or 0 .. 127 with ReLU |

All of these sizes are set in `rtl/nmpu_pkg.sv`. `nmpu_branch` and
`nmpu_post` also take them as parameters.

## The datapath, step by step

This is the part that takes the most care. The unit uses narrow words, so
each step drops bits, and the order of the cuts decides the rounding error.
The widths below are the default ones.

Each polarity goes through its own branch (`nmpu_branch`). The two
branches are the same logic:

1. **Multiply**: code (10,0) x scale (1,7) gives (11,7), 18 bits. The product
   is exact.
2. **Right shift** by 0..3: the format stays (11,7), and bits below 2^-7 are
   lost. The shift is there so that a scaled code fits the output range. It
   fits because 1023 x 1.99 / 8 < 256.
3. **Overflow check, then cut 3 MSBs and 2 LSBs**: the shift guarantees
   8 integer bits, so the top 2^2-1 = 3 integer bits are removed. If any of
   them is set, the value saturates to all ones. The 2^-7 and 2^-6 bits are
   dropped, which leaves (8,5), 13 bits.
4. **First cut/round stage** (`nmpu_round1`): removes 3 more LSBs (2^-3,
   2^-4, 2^-5), which leaves (8,2). The method decides when one unit of 2^-2
   is added (see the next section). *ArchA rounds up when the 2^-3 bit is
   set.*
5. **Overflow check**: a round-up can carry out of 255.75. The value then
   saturates to 255.75.
6. **2comp**: the value becomes two's complement with one more integer bit,
   (9,2) in 11 bits. The N branch negates it, and the P branch only widens
   it.

The two branches then meet in the **sum and output stage** (`nmpu_post`):

7. **Sum**: P branch + N branch + offset. The offset is aligned from 1 to 2
   fractional bits. The exact sum saturates to (8,2), which is 10 bits,
   -128 .. 127.75.
8. **Second cut/round stage**: removes the 2 fractional bits, which gives an
   integer. *ArchA cuts*, that is, it floors in two's complement. A round-up
   past 127 saturates.
9. **ReLU**: when `relu_en` is set, a negative result becomes 0.

A worked example: P = 100, N = 12, scale_p = scale_n = 1.0, shifts 0,
offset = +1.5.
- P branch: 100.0.
- N branch: 12.0, negated to -12.0.
- Sum: 89.5.
- Cut: 89.

## Cut/round methods

Five first-stage methods and three second-stage methods were compared. All
15 pairs can be built, through the `METHOD1` and `METHOD2` parameters of
`nmpu` (or `METHOD` of `nmpu_round1` and `nmpu_post`). The default pair is
ArchA: method 1 in the first stage and method I in the second.

The first stage works on `k.kG|abc`. G is the lowest kept bit (2^-2), and
a, b, c are the removed bits 2^-3, 2^-4, 2^-5:

| enum | pattern | round up (+2^-2) when |
|---|---|---|
| `RND1_R` (1, ArchA) | x.xx\|Rxx | a |
| `RND1_GRR` (2) | x.xG\|RRx | G = 0 and (a or b) |
| `RND1_GR` (3) | x.xG\|Rxx | G = 0 and a |
| `RND1_GRRR` (4) | x.xG\|RRR | G = 0 and (a or b or c) |
| `RND1_CUT` (5) | x.xx\|xxx | never |

The second stage has three methods:

| enum | method | rule |
|---|---|---|
| `RND2_CUT` (I, ArchA) | cut both signs | floor |
| `RND2_POS` (II) | round positive, cut negative | +0.5 then floor when the sign bit is 0 |
| `RND2_BOTH` (III) | round both | +0.5 then floor |

## One NMPU and its four columns

`nmpu` holds these parts:
- two 4:1 multiplexers, one for P and one for N, with one shared select
  `col_sel`
- the two branches
- the sum and output stage
- `nmpu_cfg_regs`, four configuration words (`col_cfg_t`: scale_p,
  shift_p, scale_n, shift_n, offset), one for each column it serves
- one 8-bit output register for each column

Everything from the multiplexers to the output registers is combinational.
If `in_valid` is high, the result for `col_sel` is written on the next
rising edge. After that edge, `res_valid`, `res_col` and `events` describe
the column just written. `events` holds five bits: ReLU zeroed, output round
saturated, sum saturated, branch round overflow, branch shift overflow.

A configuration word is written with `cfg_wr_en`/`cfg_wr_col`/`cfg_wr_data`.
It can be read from the next cycle on. Reset, which is active low and
asynchronous, loads scale 1.0, shift 0 and offset 0 into every word, and
clears the outputs.

## The tile array (`nmpu_tile_top`)

The ADCs alternate between the two edges of the crossbar: even-numbered
ADCs on one side, odd-numbered on the other. Each side has its own row of
NMPUs. NMPU `2m+s` serves ADCs `8m+2c+s` for c = 0..3:
- NMPU 0 serves ADCs 0, 2, 4, 6.
- NMPU 1 serves ADCs 1, 3, 5, 7.
- NMPU 63 serves ADCs 249, 251, 253, 255.

Outside the array, results and configuration words are addressed by ADC
index. The top decodes each index to an NMPU and a slot.

Timing of one operation:

    cycle   0      1      2      3      4
    start   1      0      0      0      0
    slot    0      1      2      3      -
    busy    0      1      1      1      0
    done    0      0      0      0      1    dout[0..255] valid

- The ADC codes must stay on `adc_p`/`adc_n` until `done`.
- `relu_en` must stay constant during an operation.
- A `start` pulse while `busy` is high is ignored.
- A configuration write during an operation is a protocol error, and an
  assertion reports it.

One column per 1 ns cycle gives the 4 ns needed for the whole tile.

The top has no ADCs, crossbar or DAC. The ADC codes come in as ports. The
test interface seen on the fabricated test block is not described in
enough detail to build, so it is not included either.

## Where this RTL goes beyond or departs from the source description

The datapath order, all formats, the cut sizes and the 15 methods are taken
from the source description. The following are this design's own choices:

- **MSBs cut after the shift.** The source says 2^2-1 = 3 MSBs are cut.
  Its block diagram labels the result (N+X-P, Y-Q), which would keep 9
  integer bits. The RTL cuts 3 bits, because only that reading gives the
  stated 8-bit output.
- **Bits removed in the second stage.** The source speaks of cutting "the
  LSB". The value there still has two fractional bits, and the output is an
  integer, so S = 2.
- **Overflow checks.** Every overflow check saturates. The source only shows
  the check boxes and does not say what they do.
- **How the branches combine.** Result = P - N + offset. The source does not
  say how the two branches combine. The N branch's "2comp" step negates.
- **ReLU bypass.** `relu_en` is an addition. The source formula always
  applies ReLU, but it also evaluates layers with and without BN.
- **Configuration storage.** There is one configuration word per column.
  Correction is per column, but the source does not say where the
  parameters live.
- **Control.** The per-column output registers, the start/done sequencer,
  the configuration write port, the reset values and the `events` port are
  this design's own.
- **Rounding rule.** "Round" means adding one LSB of the kept part.

## Verification

Each module has a self-checking testbench in `tb/`. The testbenches compare
against `tb/nmpu_ref_pkg.sv`, an integer model that works in units of each
step's LSB instead of bit slices.

| testbench | what it covers |
|---|---|
| `tb_nmpu_round1` | all 8192 inputs x 5 methods, plus the carry case |
| `tb_nmpu_branch` | both polarities; all shifts with random codes and scales, plus a grid; both overflow checks |
| `tb_nmpu_post` | 3 methods, ReLU on and off, saturation corners, 20,000 random cases |
| `tb_nmpu_cfg_regs` | reset values, writes to one column only, read-after-write |
| `tb_nmpu` | 600 rounds of configuration + 4 columns in random order, latency, events |
| `tb_nmpu_tile_top` | full 256-column tile, default parameters: 12 operations, start-to-done = 4 cycles, every output, ADC placement, ignored start, every datapath mechanism |
| `tb_nmpu_qerr` | all 15 variants on 10,000 random operand sets, bit-exact against the model, plus an error table |

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/nmpu_pkg.sv tb/nmpu_ref_pkg.sv rtl/nmpu_round1.sv rtl/nmpu_branch.sv \
      rtl/nmpu_post.sv rtl/nmpu_cfg_regs.sv rtl/nmpu.sv rtl/nmpu_tile_top.sv \
      tb/tb_nmpu_tile_top.sv --top-module tb_nmpu_tile_top
    ./obj_dir/Vtb_nmpu_tile_top

Each testbench ends with `TB_RESULT checks=N failures=M`. All of them finish
in well under a second of simulated run time.

### Precision of the 15 variants

`tb_nmpu_qerr` prints the share of outputs that are off by 0.5 or more
from an ideal result. The operands are:
- random codes
- scales in 0.88..1.17
- shift 3
- random offsets
- no ReLU

The published study used differently distributed inputs and a reference
whose integer conversion it does not state. Its numbers (about 10 % for
method I, 17 % for II, 13 % for III) are therefore not reproduced. The
ranking depends on how the reference is made integer:

- Against the real-valued result, the rounding method III is best, about
  12 %, and the cutting method I is worst, about 26..35 %.
- Against the ideal result truncated toward zero, method I is best, about
  46 %, III is close behind, and II is worst, about 70 %. This is the same
  order as the published ranking.

The choice of method pair hardly matters for network accuracy, since the
analog multiply dominates the error. ArchA is the default because it had
the best accuracy.

## Files

- `rtl/nmpu_pkg.sv`: formats, sizes, method enums, the `col_cfg_t` type
- `rtl/nmpu_round1.sv`: first cut/round stage
- `rtl/nmpu_branch.sv`: multiply, shift, cut, round, 2comp, for one polarity
- `rtl/nmpu_post.sv`: sum, second cut/round stage, ReLU
- `rtl/nmpu_cfg_regs.sv`: per-column configuration words
- `rtl/nmpu.sv`: one NMPU with 4:1 muxes and output registers
- `rtl/nmpu_tile_top.sv`: 64 NMPUs, ADC placement, sequencer, configuration decode
- `tb/`: the testbenches above and the reference model

To change a format, edit the constants in `nmpu_pkg`. The packed
configuration word and the testbench reference model assume the default
formats, so they must be adapted too.
