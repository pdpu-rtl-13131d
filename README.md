# PDPU: a fused, mixed-precision posit dot-product unit

Deep-learning inference spends most of its time in dot products. When the
numbers are posits, the obvious way to build a dot product is to chain posit
multipliers and posit adders, but then each product and each partial sum is
decoded, rounded and encoded again. This unit instead computes

    out = acc + a[0]*b[0] + a[1]*b[1] + ... + a[N-1]*b[N-1]

as one fused operation. Every operand is decoded once. The N products and
the accumulator are lined up against the largest exponent and summed
exactly in a carry-save tree. The sum is rounded once, into a posit.

The inputs can be narrower than the accumulator and the result. The default
build takes P(13,2) vectors and a P(16,2) accumulator, and returns a P(16,2)
result. It has N = 4 lanes and a 14-bit alignment window. The unit is split
into a 6-stage pipeline that accepts a new dot product every cycle.

This RTL reproduces the architecture of the PDPU paper (Li et al., "PDPU: An
Open-Source Posit Dot-Product Unit for Deep Learning Applications"). It is
written from the paper's text. The authors are not involved.

## Posit numbers in brief

A posit P(n,es) is an n-bit word. It is read as follows:

- Zero is all zeros. The word `100...0` is NaR ("not a real"), which stands for every exception.
- A negative word is the two's complement of its magnitude. It is negated before the fields are read.
- After the sign comes the **regime**. This is a run of equal bits ended by the opposite bit or by the end of the word.
  - A run of m ones gives k = m-1.
  - A run of m zeros gives k = -m.
- Next come up to es **exponent** bits e. Bits cut off by the end of the word count as zero.
- The remaining bits are the **fraction** f.
- The value is `(-1)^s * 2^(k*2^es + e) * 1.f`.

The regime has variable length, so precision is highest near 1 and tapers
towards maxpos and minpos. Rounding never produces 0 or NaR from a nonzero
real; results saturate at maxpos and minpos instead.

In this RTL a decoded posit carries:

- a sign;
- zero and NaR flags;
- a signed **scale** `k*2^es + e`;
- a **significand** `1.f` with the hidden one made explicit.

For P(13,2) the significand is 9 bits wide and for P(16,2) it is 12 bits.

## The pipeline

| Stage | Work | Modules |
|---|---|---|
| S1 decode | Decode 2N input posits and the accumulator. Form each product's sign `s_ab = s_a ^ s_b` and scale `e_ab = e_a + e_b`. | `posit_decoder` (2N+1 copies) |
| S2 multiply and compare | Multiply the significands with a radix-4 Booth multiplier. Find the largest scale `e_max` over all products and the accumulator. | `booth_multiplier`, `comp_tree` |
| S3 align | Shift each term right by `e_max - e_i` into a window of W_m bits. Turn it into two's complement with its sign. | `pdpu_align` |
| S4 accumulate | Sum the N+1 aligned terms in a carry-save tree, then do one carry-propagate add. Split the result into sign and magnitude. | `csa_tree`, `pdpu_accumulate` |
| S5 normalise | Count leading zeros, shift the leading one away, and adjust the exponent. | `pdpu_normalize`, `lzc` |
| S6 encode | Build regime, exponent and fraction. Round to nearest even, and saturate. | `posit_encoder` |

`pdpu_top` holds the pipeline registers and the S1 sign/scale logic. It also
handles exceptions: NaR or exact zero is passed down the pipeline as a pair
of flags.

Widths at the default parameters:

| Quantity | Width | Where from |
|---|---|---|
| input significand `1.f` | 9 | 13 - 2 - 2 |
| accumulator significand | 12 | 16 - 2 - 2 |
| input scale | 7 bits, signed | range of P(13,2) |
| internal exponent | 10 bits, signed | sum of two input scales, plus headroom |
| Booth product | 18 bits (2 integer bits) | radix-4, 5 digits |
| aligned term | W_m = 14 magnitude bits plus sign | parameter `WM` |
| sum of N+1 terms | 18 bits | `WM + 1 + clog2(N+1)` |
| normalised fraction | 17 bits | sum width minus the leading one |

### Decoding (S1)

`posit_decoder` negates a negative word. It then finds the length of the
regime run with a leading-zero counter, applied to the word or its inverse
depending on the first regime bit. A single left shift by that length
removes the regime, which leaves the exponent and fraction bits
left-justified. Zero and NaR are detected from the raw word.

A product is zero when either factor is zero. Zero products get the most
negative scale, so they never win the e_max comparison. They add nothing to
the sum.

### Multiplying and finding e_max (S2)

`booth_multiplier` is an unsigned radix-4 Booth multiplier:

1. The multiplier is zero-extended and cut into W/2+1 overlapping 3-bit groups.
2. Each group selects 0, +-a or +-2a.
3. The partial products are reduced with the same `csa_tree` used in S4.
4. One final adder finishes the product.

The paper calls its multiplier a *modified* radix-4 Booth multiplier but does
not say what the modification is. This is the textbook form.

`comp_tree` is a balanced, recursive tree of signed comparators over the N
product scales and the accumulator scale.

### Alignment and the W_m window (S3)

This is the stage where the unit is deliberately not exact. Each term's
significand is placed at the top of a window of `W_m` bits. The window holds
the term's 2 integer bits and `W_m - 2` fraction bits. The term is then shifted
right by `e_max - e_i`. Whatever falls below the window is dropped. There is
no sticky bit, so the dropped bits do not even take part in rounding.

Because of this:

- A term smaller than the largest term by more than about W_m binary orders of magnitude contributes nothing.
- The products, which have up to 16 fraction bits, are cut to `W_m - 2 = 12` fraction bits relative to the largest term.

The paper chooses W_m from accuracy measured on real networks. W_m = 14 is its
main setting; `WM` is a parameter. Making `WM` much wider, up to 256 bits,
would approach an exact, quire-style accumulator at a large cost in area.

After the shift, the term is negated if its sign is set. It leaves S3 as a
`W_m+1`-bit two's-complement number.

### The carry-save tree (S4)

`csa_tree` reduces NUM rows to a (sum, carry) pair by a recursion that
follows the paper's CSA-tree scheme:

- 1 row passes through with a zero carry;
- 2 rows pass through as they are;
- 3 rows go through one row of 3:2 compressors (`compressor_3to2`);
- 4 rows go through one row of 4:2 compressors (`compressor_4to2`);
- more rows are split into halves of NUM/2 and NUM - NUM/2. Each half is reduced by a smaller tree, and the two (sum, carry) pairs are merged by one more 4:2 row.

For N = 4 the tree receives 5 rows: 2 + 3 rows, then a 4:2 merge. For
N = 8 it receives 9 rows: 4 + 5 rows. All arithmetic is modulo 2^W, and the
terms are sign-extended to the sum width. This makes two's-complement rows
come out right.

`pdpu_accumulate` adds sum and carry and returns the sign and magnitude of
the total. The magnitude of a negative total is its two's complement.

### Normalisation (S5)

`pdpu_normalize` counts the leading zeros of the magnitude and shifts them
out, together with the leading one. The result exponent is
`e_max + (sum width - 1 - fraction bits) - lz`. An all-zero magnitude (exact
cancellation) raises a zero flag, and the output is then the posit 0.

### Encoding and rounding (S6)

`posit_encoder` splits the exponent into a regime value k and es exponent
bits. The bit string `regime | exponent | fraction` is built by an
arithmetic right shift:

- `{1,0,e,f}` is shifted by k for k >= 0;
- `{0,1,e,f}` is shifted by -k-1 for k < 0.

The top n-1 bits form the word. The first dropped bit is the guard bit, and
the OR of all lower bits is the sticky bit. The word rounds up when guard is
set and either sticky or the word's last bit is set; this is round to
nearest, ties to even.

Exponents beyond the posit range saturate to maxpos or minpos. A negative
result is the two's complement of the rounded magnitude. The paper does not
state its rounding mode. Round to nearest even is the posit standard's rule.

## Interface and timing

```
module pdpu_top #(
  int unsigned N_IN  = 13,  ES_IN  = 2,   // format of vec_a_i / vec_b_i
  int unsigned N_OUT = 16,  ES_OUT = 2,   // format of acc_i / out_o
  int unsigned N     = 4,                 // lanes (products per operation)
  int unsigned WM    = 14                 // alignment window
) (
  input  logic                        clk_i, rst_ni,
  input  logic                        valid_i,
  input  logic [N-1:0][N_IN-1:0]      vec_a_i, vec_b_i,
  input  logic [N_OUT-1:0]            acc_i,
  output logic                        valid_o,
  output logic [N_OUT-1:0]            out_o
);
```

- Each stage ends in a register. A result appears on `out_o`, with `valid_o`
  high, exactly 6 rising edges after its operands were sampled with
  `valid_i` high.
- A new operation may start every cycle.
- There is no back-pressure.
- The asynchronous active-low reset clears only the valid bits. The data
  registers need no reset.
- To accumulate a dot product longer than N, feed each result back as
  `acc_i` of the next chunk. That costs one rounding per chunk, and 6 cycles
  per chunk if the chunks depend on each other.

The paper gives the pipeline as six stages but does not show where the
registers sit inside them. Registers between stages are this design's own
choice. So are the valid signal and the reset behaviour.

`pdpu_pkg` holds the default formats (`DefNIn`, `DefEsIn`, `DefNOut`,
`DefEsOut`, `DefN`, `DefWm`) and the width functions that every module uses.

## Configurations

The paper evaluates several configurations. All are reachable through the
parameters, and each has been simulated:

| Inputs / output | N | W_m | Notes |
|---|---|---|---|
| P(13,2) / P(16,2) | 4 | 14 | default, the paper's main configuration |
| P(16,2) / P(16,2) | 4 | 14 | uniform precision |
| P(13,2) / P(16,2) | 8 | 14 | eight lanes |
| P(10,2) / P(16,2) | 8 | 14 | narrower inputs |
| P(13,2) / P(16,2) | 8 | 10 | narrower alignment window |
| P(10,0) / P(16,0) | 4 | 14 | es = 0 on both sides (not evaluated in the paper) |

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the
module with an independent model and prints
`TB_RESULT checks=<n> failures=<n>`. The models are in `tb/posit_ref_pkg.sv`.
They are loop-based and bit-accurate, and share no code with the RTL:

- `decode` reads a posit bit by bit;
- `encode` writes out the whole bit string and rounds it;
- `dot_ref` performs the unit's algorithm, including the W_m truncation, on plain integers.

| Testbench | What it covers |
|---|---|
| `tb_posit_decoder` | every P(13,2) and P(16,2) word, and hand-worked P(8,2) examples |
| `tb_booth_multiplier` | exhaustive 9x9 and random wider products |
| `tb_comp_tree`, `tb_csa_tree` | random inputs at several sizes |
| `tb_pdpu_align`, `tb_pdpu_accumulate`, `tb_pdpu_normalize` | random inputs, with the result worked out bit by bit |
| `tb_posit_encoder` | round trip of every P(16,2) word; random rounding and saturation cases |
| `tb_pdpu_top` | see the list below |
| `tb_pdpu_configs` | the five non-default configurations above, streamed against `dot_ref` |

`tb_pdpu_top` runs the default build end to end:

- 3000 back-to-back random operations, each checked against `dot_ref` for its value and for arrival exactly 6 cycles after issue;
- directed cases: NaR operands, exact cancellation, maxpos and minpos saturation, and terms lost in alignment;
- a 147-term dot product (one output of a 7x7x3 convolution), fed in chunks with the result returned as accumulator.

It counts each of these mechanisms and fails if any never happened.

To run a testbench with verilator, for example the end-to-end one:

```
verilator --binary --timing -Wno-fatal rtl/pdpu_pkg.sv tb/posit_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v pdpu_pkg) tb/tb_pdpu_top.sv \
    --top-module tb_pdpu_top -o sim
./obj_dir/sim
```

The packages must be compiled first, and only once each. The remaining
warnings are width notes and signals unused at some parameter values.

The other testbenches run the same way with their own top module. The whole
set finishes in a few minutes.

The reference model carries the unit's own truncation. The testbenches
therefore prove that the RTL implements the algorithm described here, not
that the algorithm is accurate. For accuracy, the 147-term test also prints
the exact real-valued result next to the unit's result. In a typical run the
difference is a fraction of a percent.

## Where this RTL departs from, or goes beyond, the paper

- **Pipeline registers.** The six stages are the paper's. Putting a register at the end of each stage, the valid bit and the reset are this design's own choices.
- **Booth multiplier.** This is the plain radix-4 form; the paper's "modified" variant is not described.
- **Alignment window.** Here W_m counts the aligned magnitude, including its 2 integer bits. Bits shifted below the window are dropped without a sticky bit. The paper gives W_m as the alignment width but does not define these details.
- **Rounding.** Round to nearest, ties to even, with saturation at maxpos and minpos. The paper does not name a mode.
- **Exceptions.** Any NaR operand gives NaR. A sum that is exactly zero gives 0.
- **Formats.** As in the paper, any n and es may be chosen for the inputs and for the accumulator/output, including es = 0. The testbenches cover es = 2 (the only value the paper evaluates) and one es = 0 build.
- **Not built:** the quire-based exact unit the paper compares against, and any accuracy runs on trained networks. The operands used in testing are random.
- **Synthesis results are not reproduced.** The paper's area, delay and power figures depend on its cell library and are not reproduced.
