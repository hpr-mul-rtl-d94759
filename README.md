# HPR multiplier: triple redundancy with two cheap copies

A multiplier for systems that must keep working through soft errors (particle
strikes, glitches) but can accept a slightly inexact product now and then.
Classic triple modular redundancy (TMR) builds the multiplier three times and
votes, which roughly triples area and power. The high-precision redundancy
(HPR) multiplier keeps the three-way vote but makes two of the copies much
smaller:

* one **full precision (FP)** N x N multiplier, built from four smaller
  sub-multipliers so that its partial sums are visible;
* two **reduced precision (RP)** multipliers that see only the upper N-K bits
  of each operand — about a quarter of the array for K = N/2;
* a plain **2(N-K)-bit majority voter** over the upper product bits.

The trick that makes the small copies accurate is that each RP copy does not
simply drop the lower operand bits. It borrows from the FP copy the exact
carry-in that the lower partial products contribute to the upper product
bits, so when nothing is faulty all three copies agree exactly on the upper
2(N-K) bits and a simple voter suffices. A reduced-precision scheme with
independent truncated copies needs a subtractor, a threshold comparator and a
multiplexer to decide which copy to trust. Here the lower 2K product bits are
computed once, by the FP copy, and are not protected. K sets the trade-off
between protection and cost.

The RTL is a direct, parameterised, purely combinational rendering of this
scheme: unsigned operands, default N = 8, K = 4.

## The arithmetic

Split each operand at bit K:

    A = A_H * 2^K + A_L        A_H = A[N-1:K] (N-K bits),  A_L = A[K-1:0]
    B = B_H * 2^K + B_L

    A*B = A_H*B_H * 2^(2K)  +  (A_H*B_L + A_L*B_H) * 2^K  +  A_L*B_L

The FP multiplier (`hpr_fp_mul`) forms the four sub-products with four
sub-multipliers and sums them in this order:

| step | operation | width |
|---|---|---|
| s1, c1 | A_H*B_L + A_L*B_H | N-bit adder, carry c1 |
| s2, c2 | s1 + (A_L*B_L >> K) | N-bit adder, carry c2 |
| {hc, hs} | c1 + c2 | half adder |
| **req** | {0…0, hc, hs, s2[N-1:K]} | 2(N-K) bits |
| P[2N-1:2K] | A_H*B_H + req | 2(N-K)-bit adder |
| P[2K-1:K] | s2[K-1:0] | |
| P[K-1:0] | (A_L*B_L)[K-1:0] | |

`req` ("required signals") is exactly

    req = floor( (A_H*B_L + A_L*B_H + floor(A_L*B_L / 2^K)) / 2^K )
        = (A*B >> 2K) - A_H*B_H

that is, everything the three lower sub-products carry into the upper
2(N-K) bits. It is sent to both RP copies (`hpr_rp_mul`). Each RP copy only
has its own (N-K) x (N-K) multiplier and a 2(N-K)-bit adder:

    RP output = A_H*B_H + req  =  (A*B)[2N-1:2K]

which is the same value the FP copy puts on its upper bits.

Worked example, N = 8, K = 3, A = 151 = 10010|111, B = 108 = 01101|100:
A_H*B_H = 234, A_L*B_H = 91, A_H*B_L = 72, A_L*B_L = 28 = 011|100.
s1 = 163, s2 = 163 + 3 = 166 = 10100|110, so req = 10100 = 20. The upper 10
bits are 234 + 20 = 254, and the product is 0011111110 | 110 | 100 = 16308.
`tb_hpr_fp_mul` checks these intermediate values.

Two facts about the half adder that are easy to miss:

* Its carry hc is always 0. The three lower sub-products sum to less than
  2^(N+1), so c1 and c2 are never both set. It is kept to mirror the
  structure, and synthesis sees the top bits of `req` as constants.
* For N-K = 1 (K = N-1) the field {hc, hs, s2[N-1]} has three bits but the
  adder has two. The always-zero hc is dropped. The RTL casts the field to
  2(N-K) bits in every case: zero-extend or cut.

## Voting, and what is protected

`hpr_tmr_voter` takes the FP copy's bits [2N-1:2K] and the two RP outputs and
returns the bitwise majority. The final product is `{voted, FP[2K-1:0]}`.

How faults behave:

* **A fault confined to one RP copy** (its multiplier, adder or operand bits)
  is always outvoted. The output is exact.
* **A fault in the FP copy's upper datapath** (A_H*B_H or its final adder) is
  outvoted by the two RP copies, which agree.
* **A fault on the FP copy's lower datapath or lower operand bits** changes
  `req`. Both RP copies add the same wrong `req` and outvote the FP copy.
  The output error is therefore limited to the size of the lower partial
  products' contribution, not a flipped high-order bit. This coupling between
  copies is the price of the cheap copies. It is why the scheme is "high
  precision" rather than exact under faults.
* **The lower 2K product bits** are not voted. A fault there reaches the
  output, but its weight is below 2^(2K).

## Choosing K

K is chosen at design time from a quality bound Q_DUB (largest tolerated
error, in percent of full scale). `hpr_pkg::select_k(N, Q_DUB)` implements
the rule:

    MTED = (2^N - 1) * Q_DUB / 100          (maximum tolerable error distance)
    round MTED down to a power of four, 2^(2m);  K = m
    i.e. K = floor( floor(log2 MTED) / 2 )

Example: N = 8, Q_DUB = 7 % gives MTED = 17.85, so 16 = 2^4 and K = 2. This
is a 6 x 6 RP multiplier, a 12-bit voter and 4 unvoted low bits. Two things
about the rule:

* The rule is sometimes written with 2^(2N) - 1 in place of 2^N - 1. That
  version does not reproduce the example, so the example's form is
  implemented.
* The rule gives K = 0 when MTED < 1. The multiplier itself needs
  1 ≤ K ≤ N-1, and `hpr_mul` stops elaboration with an error otherwise.

`select_k` is a constant function, so it can be used directly:
`hpr_mul #(.N(8), .K(hpr_pkg::select_k(8, 7)))`. Q_DUB is a whole percentage.

## Modules

| file | role | parameters |
|---|---|---|
| `rtl/hpr_pkg.sv` | `select_k`, `mted_floor`, `floor_log2` (design-time K rule) | — |
| `rtl/hpr_block_mul.sv` | unsigned WA x WB array multiplier (sub-multiplier) | WA, WB |
| `rtl/hpr_adder.sv` | W-bit ripple-carry adder with carry out | W |
| `rtl/hpr_fp_mul.sv` | FP block-level multiplier; outputs P and `req` | N, K |
| `rtl/hpr_rp_mul.sv` | RP copy: (N-K)² multiplier + 2(N-K)-bit adder | H = N-K |
| `rtl/hpr_tmr_voter.sv` | W-bit bitwise majority voter | W |
| `rtl/hpr_mul.sv` | top: FP + 2 × RP + voter + noise inputs | N = 8, K = 4 |

Top-level ports of `hpr_mul`:

| port | dir | width | meaning |
|---|---|---|---|
| `a`, `b` | in | N | unsigned operands |
| `fp_flip_a`, `fp_flip_b` | in | N | XOR masks on the FP copy's operands |
| `rp_flip_a`, `rp_flip_b` | in | [1:0][N-K-1:0] | XOR masks on each RP copy's A_H, B_H |
| `p` | out | 2N | product |

The design has no clock, reset or handshake. `p` is valid one combinational
settling time after the inputs. To pipeline it, register the inputs and `p`
around `hpr_mul`, or cut inside `hpr_fp_mul` after the sub-multipliers. The
block structure does not prescribe stages.

The flip-mask ports are the noise sources used to study fault tolerance: a 1
flips that input bit of that copy only. Tie them to zero in a product design.
They cost one XOR per input bit. To drop them, delete the four XOR
assignments in `hpr_mul`.

The internal sub-multiplier and adder architectures (array, ripple) are
placeholders chosen for clarity. Any correct unsigned multiplier or adder can
replace them without changing the scheme. A real redundant design would often
also diversify the three copies.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=… failures=…`:

| testbench | what it does |
|---|---|
| `tb_hpr_block_mul` | exhaustive 4x4, 6x2, 2x6, 7x1, 5x3 products |
| `tb_hpr_adder` | exhaustive 8-bit sums + random 12-bit sums, with carry |
| `tb_hpr_tmr_voter` | single faulty input always outvoted; random triples vs counted majority |
| `tb_hpr_pkg` | `select_k` vs a real-arithmetic reference for N = 2..32, Q_DUB = 0..100 %; the N = 8, 7 % example |
| `tb_hpr_fp_mul` | N = 8, every K = 1..7, all 65,536 operand pairs: product and `req`; the two worked examples |
| `tb_hpr_rp_mul` | random inputs; for K = 4 the output equals the upper product byte for all operand pairs |
| `tb_hpr_mul` | default size, no overrides. All 65,536 products fault-free, then 20,000 random fault injections against an arithmetic model. Counts each mechanism above (FP/RP0/RP1 outvoted, RP fault masked, FP fault reaching `req`, unvoted low bits hit) and fails if one never happens |
| `tb_hpr_soft_error` | soft-error sweep, see below |
| `tb_hpr_internal_faults` (+ `tb_hpr_fault_harness`) | forced flips on internal nets, see below |
| `tb_hpr_image_apps` | image kernels, see below |

Running one with Verilator from the project root:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb rtl/hpr_pkg.sv \
        tb/tb_hpr_mul.sv --top-module tb_hpr_mul
    ./obj_dir/Vtb_hpr_mul

`-Wno-fatal` is needed because the testbenches' reference arithmetic mixes
8-bit and 32-bit operands on purpose, and Verilator warns about that. The RTL
itself lints clean under `-Wall`, apart from the intentionally open
carry-out pins. Each simulation takes well under a second.

### Soft-error sweep (`tb_hpr_soft_error`)

In this sweep, every input bit of every copy is flipped independently with
probability Pf. The testbench uses N = 8 and K = 2, 4, 6, with 20,000 random
operand pairs per point. It gives the mean square error against the exact
product for three multipliers:

* the HPR design;
* a reference TMR with three full 8x8 copies and a bitwise vote, modelled in
  the testbench;
* one unprotected multiplier.

Before the sweep, a directed case runs at N = 8, K = 2, with A = 151 and
B = 108. One upper operand bit of the FP copy is flipped. Because B_L = 0,
only the FP copy's upper 12 bits change. The 12-bit voter outvotes them, and
the output stays 16308.

One run produced the figures below. They vary with the random seed.

| Pf | K | MSE HPR | MSE TMR ref. | MSE single | HPR / TMR |
|---|---|---|---|---|---|
| 0.001 | 2 | 1.18e3 | 8.6e2 | 1.19e6 | 1.38 |
| 0.001 | 4 | 8.6e3 | 8.6e2 | 1.19e6 | 10.0 |
| 0.005 | 4 | 1.91e5 | 2.35e5 | 4.04e6 | 0.81 |
| 0.01 | 2 | 8.71e5 | 9.03e5 | 9.28e6 | 0.96 |
| 0.01 | 4 | 8.19e5 | 9.03e5 | 9.28e6 | 0.91 |
| 0.01 | 6 | 1.63e6 | 9.03e5 | 9.28e6 | 1.81 |
| 0.02 | 4 | 3.40e6 | 3.87e6 | 1.80e7 | 0.88 |

HPR is one to two orders of magnitude better than no protection. Against a
bitwise-voting full TMR it is about equal. At very low Pf it is worse, because
its unvoted low bits and the shared `req` become the dominant error. A TMR
that votes whole words ("strict majority") fails more often when all three
words differ. That reference would make HPR look better than this one does,
so the ratio depends strongly on how the reference TMR voter is built.

### Faults on internal nets (`tb_hpr_internal_faults`)

This testbench uses Verilog `force` to flip bits on the design's internal
word-level nets:

* the four FP sub-products;
* the two N-bit sums s1 and s2;
* `req`;
* the FP product;
* each RP copy's A_H·B_H product and its output.

Each bit is flipped with probability Pf. The nets are walked in signal-flow
order, so an upstream fault propagates into later nets. The constant zero
padding of `req` is not faulted, because it is a tie-off rather than a net.
The testbench checks every output against an arithmetic model of the same
faults. It compares the MSE with that of the faulty FP product alone:

| K | Pf = 0.001 | Pf = 0.01 | Pf = 0.02 |
|---|---|---|---|
| 2 | 0.003 | 0.044 | 0.088 |
| 4 | 0.054 | 0.115 | 0.187 |
| 6 | 0.36 | 0.41 | 0.47 |

Each cell is HPR MSE divided by the unprotected FP MSE, from one run.

The benefit shrinks as K grows, for two reasons:

* more of the product lies in the unvoted low 2K bits;
* more of it depends on the shared `req`.

A flip on `req` reaches all three copies and cannot be outvoted. It is the
scheme's single point of weakness.

### Image kernels (`tb_hpr_image_apps`)

The testbench generates two 64 x 64 8-bit images. Every multiplication goes
through `hpr_mul` at N = 8, K = 4. It runs three kernels:

* multiplication: X1·X2/255;
* a 5x5 sharpening filter: 2X − (1/273)·Σ X·Ms, with
  Ms = [1 4 7 4 1; 4 16 26 16 4; 7 26 41 26 7; 4 16 26 16 4; 1 4 7 4 1];
* a 5x5 smoothing filter: (1/60)·Σ X·Mt, with
  Mt = [1 1 1 1 1; 1 4 4 4 1; 1 4 12 4 1; 1 4 4 4 1; 1 1 1 1 1].

It reports the mean SSIM (8x8 tiles) against the error-free output:

| kernel | Pf | HPR | TMR ref. | single |
|---|---|---|---|---|
| multiplication | 0.01 | 0.996 | 0.995 | 0.958 |
| multiplication | 0.05 | 0.912 | 0.902 | 0.788 |
| sharpening | 0.01 | 0.974 | 0.978 | 0.706 |
| sharpening | 0.05 | 0.747 | 0.752 | 0.254 |
| smoothing | 0.01 | 0.756 | 0.832 | 0.344 |
| smoothing | 0.05 | 0.338 | 0.374 | 0.155 |

The checks are:

* without noise, every product is exact;
* with noise, every product matches the model;
* HPR gives a higher SSIM than the unprotected multiplier.

The numbers are not directly comparable with figures from natural
photographs. The images are synthetic and small, and the TMR reference uses
a bitwise vote.

## Where this RTL stops, and what it chose

Taken from the scheme as published:

* the operand split;
* the four-block FP structure with its two N-bit adders and half adder;
* sharing `req` with the RP copies;
* RP copies made of one multiplier and one adder;
* the 2(N-K)-bit voter, with the low bits taken from the FP copy;
* the K selection rule;
* the 5x5 filter masks.

Choices made here:

* unsigned operands;
* bitwise rather than word-wise majority;
* array sub-multipliers and ripple-carry adders;
* no pipelining;
* the flip-mask noise ports;
* defaults N = 8, K = 4, the configuration used for the image workloads;
* Q_DUB as a whole percentage.

Not covered:

* Area, delay and power. Synthesis reports only cell counts here.
* Faults inside the sub-multipliers and adders. Only operand flips (through
  ports) and flips on the word-level nets between blocks (through `force`)
  are modelled. Gate-level faults would need a netlist.
* The comparison against other reduced-precision multipliers, which are not
  part of this design.
