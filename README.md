# SPADE: one posit MAC datapath for three precisions

Deep networks tolerate very different precisions from layer to layer. Posit
numbers are a good fit for such work: they are tapered, so most of their
precision sits near 1, where weights and activations sit. Building a separate
posit unit for each width wastes area. SPADE instead builds **one** 32-bit
multiply-accumulate datapath whose adders, shifters, leading-one detectors and
multiplier are cut into 8-bit slices. A 2-bit `mode` decides which slice
boundaries are real lane boundaries. The same hardware then performs, every
clock cycle:

| mode | format         | lanes per 32-bit word | MACs per cycle |
|------|----------------|-----------------------|----------------|
| `00` | Posit(8,0)     | 4                     | 4              |
| `01` | Posit(16,1)    | 2                     | 2              |
| `10` | Posit(32,2)    | 1                     | 1              |

Products are summed in a quire, a wide accumulator register. Rounding happens
only once, when a result is read out. The MAC engine is the processing
element of an output-stationary systolic array. A host processor fills the
array's memory banks over a word bus and starts runs through a small control
unit.

This RTL is a reconstruction from a published description. Where that
description is silent, this implementation chose something itself. Those
choices are marked in every file header and in the departures list below.

## Lane fusion: how 8-bit slices become 16- and 32-bit lanes

Each SIMD building block has four segments of `SEG` bits (8 for posit words,
32 for the quire). A lane is one, two or four neighbouring segments. The
function `spade_pkg::seg_is_lane_lsb(mode, s)` answers "does segment `s`
start a lane in this mode?". Every block uses that answer the same way:

- **`simd_complementor`** computes a two's complement (or a pass-through) per
  lane. Each segment is XORed with its lane's negate flag. The +1 enters only
  at the lowest segment of a lane. Higher segments take the carry-out of the
  segment below. So carries stop at lane boundaries in P8 mode, cross one
  boundary in P16 mode and cross all of them in P32 mode.
- **`simd_lod`** has one leading-one detector per segment. A two-level merge
  combines them: `CM1 = VM0_hi ? CM0_hi : SEG + CM0_lo`, and `CM2` is built
  from the two `CM1`s in the same way. P8 uses the segment counts, P16 the
  `CM1`s and P32 `CM2`. The output is a leading-zero count per lane, plus a
  `valid` flag that says the lane holds a one.
- **`simd_shifter`** is a logarithmic barrel shifter. At every stage, a bit
  crosses a segment boundary only when both segments belong to one lane.
  Otherwise a 0 (left shift) or the lane's fill bit (right shift) enters.
  Arithmetic right shifts use the sign as fill. The encoder uses fill ones to
  build regimes.
- **`simd_multiplier`** multiplies two 28-bit mantissa vectors. Sixteen 7×7
  radix-4 Booth multipliers produce the partial products `PD_ij` of chunk `i`
  of A and chunk `j` of B, each weighted 2^(7(i+j−2)):
  - P8 sums only the diagonal `PD_ii`. This gives four independent 14-bit
    products of 1.6-format mantissas.
  - P16 sums `PD_ij` with i and j in the same pair. This gives two 28-bit
    products of 1.13 mantissas.
  - P32 sums all sixteen into one 56-bit product of 1.27 mantissas.

  The mantissa vector has 7 bits per P8 lane. They hold the hidden one and the
  fraction field as the decoder's shifter leaves it (format 1.6); the lowest
  bit is always zero. The chunks are 7 bits wide so that sixteen of them
  tile the 56-bit product exactly.

## The MAC pipeline (`spade_mac`)

`spade_mac` takes three SIMD posit words, `V1`, `V2` and `V3`, and an
operation code `opr`:

| `opr` | name      | per lane                              |
|-------|-----------|---------------------------------------|
| `00`  | `OPR_MUL` | quire ← V1·V2 (accumulation bypassed) |
| `01`  | `OPR_FMA` | quire ← V1·V2 + V3                    |
| `10`  | `OPR_MAC` | quire ← quire + V1·V2                 |

The output is the quire rounded to the lane's posit format. The pipeline has
six register banks and five stages of logic between them:

1. **Decode** (`posit_decoder` ×3). Each lane is converted to sign-magnitude
   by the complementor. The regime run is found with the SIMD LOD after an XOR
   with the first regime bit. The word is then left-shifted to expose
   exponent and fraction. The outputs per lane are sign, scale factor
   `sf = k·2^es + e` (10 bits, signed), and a mantissa with its hidden one.
   Zero and NaR lanes are flagged.
2. **Multiply and scale.**
   - Product sign = XOR of the signs.
   - Product scale = sum of the scale factors.
   - Mantissa product from `simd_multiplier`.
   - The product and `V3` are placed at the binary point of the quire lane,
     then given their signs by a complementor.
   - `sf_saturate` clamps each scale into the format's range:
     ±6, ±28 and ±120, that is ±(n−2)·2^es.
   - The clipped amount becomes a right shift. A value below the range is
     therefore shifted, not lost in the scale.
3. **Accumulate** (`quire_adder`).
   - `opr` selects the addend: nothing, `V3`, or the quire register.
   - Scale factors are compared per lane. A zero operand always counts as
     the smaller one.
   - The smaller operand is shifted right arithmetically by the scale
     difference, and the lanes are added. The result takes the larger scale.
   - The output register of this stage *is* the quire. It feeds straight
     back, so a new MAC can issue every cycle with no stall.
   - An overflow of a lane sets `out_ovf`.
4. **Normalize** (`quire_normalizer`). Quire lanes are turned back into
   sign-magnitude (the MSB is the sign). A leading-zero count and a left
   shift normalize them. The scale is recomputed as
   `sf = saq + QL/2 − 1 − lzc`.
5. **Encode** (`posit_encoder`). Each lane of a 64-bit SIMD vector (2n bits
   per lane) is loaded with `{10 or 01, exponent, fraction}`. It is then
   shifted right by the regime length, with ones or zeros coming in. The top
   n−1 bits form the body. The bits below give guard and sticky, which drive
   round-to-nearest-even. Results saturate to maxpos/minpos: they never round
   to zero or NaR. Finally the sign is applied by the complementor.

**Timing.** A word presented with `in_valid` at clock edge *t* comes out
with `out_valid` after edge *t+5*. One word is accepted per cycle.

**NaR rule.** NaR in any used operand makes the lane NaR. Under `OPR_MAC`,
NaR stays in the quire until the next `OPR_MUL` or `OPR_FMA`.

### Quire format

The quire is 128 bits, split like the words:

| mode | quire lanes  |
|------|--------------|
| P8   | 4 × 32 bits  |
| P16  | 2 × 64 bits  |
| P32  | 1 × 128 bits |

Each lane is two's complement, with its binary point in the middle (bit
`QL/2`). Each lane also carries its own 10-bit scale factor. The quire is
therefore a small floating-point accumulator with a long mantissa, not a full
Kulisch register. Because of this, additions whose scales differ by more than
the lane's fractional width lose the low bits of the smaller operand. Sums
are then correctly rounded in nearly all cases, but can be one posit code
away from the exactly rounded value. The testbenches measure this against an
exact 1024-bit fixed-point reference. Near-misses must stay below a tenth of
the exact matches; in the random tests none occurred.

A known limit: in P32 mode, a single product smaller than about 2^-184 is
shifted out of the quire. It comes out as zero, not as minpos.

## The accelerator (`spade_accel`)

```
        host word bus
             |
   +---------+---------+------------------+
   | control_unit      |  address_mapper  |
   +---------+---------+------------------+
             |
   IF bank --+--> if_mem skew --> columns of the array (down)
   WT bank --+--> wt_mem skew --> rows of the array (right), with control word
             |
       N x N systolic_array of spade_pe (each one spade_mac)
             |
       result rows --> act_func (ReLU) --> OF bank
```

A run computes, per lane, `OF[i][j] = AF( Σ_k W[i][k] · X[j][k] )` for
`0 ≤ i,j < N` and `1 ≤ K ≤ 64`. Every lane of a SIMD word is an independent
problem. In P8 mode, one run therefore computes four 4×4 outputs at once.

**Banks** (`mem_bank`). There are three: IF, WT and OF. Each has `DEPTH` = 64
rows of `N` = 4 words. The host port is word-wide; a read returns data one
cycle later. The array port reads or writes a whole row.

**Skew registers** (`skew_register`). Entry *i* of a row is delayed by *i*
cycles. Row *i* of the array therefore receives its first weight *i* cycles
after row 0, and the same holds for feature columns. Weights and the control
word `{valid, first, last, mode}` then move right one PE per cycle, and
features move down. PE(i,j) meets `W[i][k]` and `X[j][k]` in the same cycle.

**Processing element** (`spade_pe`). The PE issues `OPR_MUL` for the first
element of a dot product and `OPR_MAC` for the others. When the last element
leaves the pipeline, it holds the rounded result and raises `done`. This
happens at the sixth edge after the last operands arrived.

**Activation** (`act_func`). ReLU per lane: a negative lane becomes zero and
NaR passes unchanged. It can be bypassed.

**Control unit** (`control_unit`). The FSM runs:

1. `IDLE`.
2. `STREAM`: K cycles, reading IF row `if_base+k` and WT row `wt_base+k`.
3. `WAIT`: at least 2N+2 cycles, then until every PE is done.
4. `WRITE`: N cycles, writing result row *i* to OF row `of_base+i`.
5. Back to `IDLE`, with `done` set and a one-cycle `irq`.

A run takes K + 3N cycles plus a fixed overhead of at most 12. The `CYCLES` register reports the exact
count.

### Host address map (16-bit word addresses)

| `addr[15:14]` | region    | offset meaning                    |
|---------------|-----------|-----------------------------------|
| 0             | registers | `addr[3:0]` = register index      |
| 1             | IF bank   | `row * N + column`                |
| 2             | WT bank   | `row * N + column`                |
| 3             | OF bank   | `row * N + column` (host may read)|

| index | register  | bits                                                        |
|-------|-----------|-------------------------------------------------------------|
| 0     | `CTRL`    | [0] start (write 1), [2:1] mode, [3] AF enable              |
| 1     | `STATUS`  | [0] busy, [1] done, [7:4] lanes in which a NaR result was seen |
| 2     | `KLEN`    | dot-product length K                                        |
| 3,4,5 | `IF_BASE`, `WT_BASE`, `OF_BASE` | first bank row of each operand/result |
| 6     | `CYCLES`  | clock cycles of the last run                                |

A write to `CTRL` with bit 0 set starts a run; a start while busy is ignored.

## What follows the original description and what does not

Taken from the description of SPADE:

- the three formats and the 2-bit mode;
- the lane fusion of complementor, LOD, shifter and multiplier, including
  the segment structure, the CM/VM merge of the LOD and the `PD_ij` layout of
  the multiplier;
- the five-stage pipeline with its units (decoders, XOR, scale adder,
  multiplier, complementors, SF saturate, shifters, operand selection, SF
  compare, align/swap, quire adder, 2's complement, LZC, normalize, encoder);
- the three operands with an operation select, including bypass of
  accumulation;
- arithmetic right-shift alignment, and round-to-nearest-even;
- the system: a host, IF/WT/OF memory banks, skew registers in front of an
  N×N array of these PEs, an activation unit and a control unit with
  registers, FSM and address mapper.

Choices of this implementation:

- **Encodings.** The mode values `00/01/10` and the `opr` codes.
- **Quire.** Width (4n bits per lane), binary-point position, 10-bit scale
  factors, saturation range and overflow flag.
- **Multiplier panels.** The published multiplier figure labels its 8-bit
  and 16-bit panels the opposite way from their caption. This design follows
  the labels and bit positions printed inside the panels. (The same figure
  also swaps the caption letters of its LOD and complementor panels.)
- **Special values.** Zero/NaR handling and saturation to maxpos/minpos.
- **Array sizes.** N = 4, bank depth 64 and the bank organisation. The
  original gives no sizes.
- **Dataflow.** Output-stationary, with skewing registers, and ReLU as the
  activation.
- **Host side.** The bus, register map, FSM and timing.

Known departures from the described behaviour:

- The description calls the quire accumulation exact. The alignment it
  describes (scale-factor compare and right shift) truncates, and this
  design follows that structure. Results can therefore be one code off, as
  explained above.
- P32 products below about 2^-184 flush to zero.
- The original attaches the accelerator to a RISC-V SoC (CVA6 core) with a
  camera. Neither is part of this RTL; the host bus ports are where such a
  host would connect.
- Synthesis results (area, power, frequency in 28/65/180 nm) are not
  reproduced here.

## Sizing against networks

On-chip storage is 256 words per bank. A run covers a 4×4 output tile with
K ≤ 64, in 4, 2 or 1 lanes. Networks such as LeNet-5, AlexNet or VGG-16 have
tens of thousands to millions of weights. They have to be tiled by the host,
and dot products longer than 64 have to be split, with the partial sums
added outside the array.

## Files

| file | contents |
|------|----------|
| `rtl/spade_pkg.sv` | types, constants, lane helper functions |
| `rtl/simd_complementor.sv`, `simd_lod.sv`, `simd_shifter.sv` | lane-fused building blocks |
| `rtl/booth_mul7.sv`, `simd_multiplier.sv` | mantissa multiplier |
| `rtl/posit_decoder.sv`, `sf_saturate.sv`, `quire_adder.sv`, `quire_normalizer.sv`, `posit_encoder.sv` | pipeline stages |
| `rtl/spade_mac.sv` | the MAC engine |
| `rtl/spade_pe.sv`, `systolic_array.sv`, `skew_register.sv` | the array |
| `rtl/mem_bank.sv`, `act_func.sv`, `address_mapper.sv`, `control_unit.sv` | memories and control |
| `rtl/spade_accel.sv` | top level |
| `tb/posit_ref_pkg.sv` | exact reference: posit decode/encode and 1024-bit fixed-point accumulation |
| `tb/tb_<module>.sv` | self-checking testbench of each module |

## Simulating

Every testbench is self-checking. It drives random operands (`$urandom`)
plus corner cases, compares against `posit_ref_pkg` or a small model of its
own, and checks cycle counts where timing is defined. Each ends by printing
`TB_RESULT checks=<n> failures=<m>`, and each has a watchdog. Example with
plain Verilator 5:

```
verilator --binary --timing -Wno-fatal \
  rtl/spade_pkg.sv tb/posit_ref_pkg.sv rtl/*.sv tb/tb_spade_mac.sv \
  --top-module tb_spade_mac -j 8
./obj_dir/Vtb_spade_mac
```

Replace `tb_spade_mac` with any other testbench name. `tb_spade_accel` is the
whole accelerator at its default size (N = 4, depth 64). It runs seven jobs
through the host bus and checks every OF word against the reference:

- all three modes, including mode switches between runs;
- K = 1 up to K = 32;
- nonzero base rows;
- ReLU clipping and pass-through;
- NaR propagation;
- the `CYCLES` register.

It counts how often each of these mechanisms happened and fails if one never
did. It finishes in about a second.

`tb_spade_mac` checks the engine itself: MUL, FMA and MAC in every mode,
back-to-back issue, the 6-edge latency, and NaR and zero cases. It runs more
than ten thousand checks.
