# A parallel NTT/INTT accelerator on redundant Montgomery arithmetic

Lattice-based post-quantum schemes (ML-KEM, ML-DSA, Falcon) spend most of
their time multiplying polynomials, and they do it with the number theoretic
transform (NTT). This accelerator computes N-point forward and inverse NTTs
for a modulus q that can be changed at run time. It uses a two-dimensional
array of butterfly processing elements (PEs) fed from a banked coefficient
memory.

The central idea is in the arithmetic. A conventional butterfly puts a
conditional correction (compare, then subtract q) after the Montgomery
multiplier, after the subtractor and after the adder. Here every value lives
in Montgomery form in the *redundant* range [0, 2q), and the Montgomery radix
R = 2^W satisfies R > 8q. With that choice:

* every butterfly output falls back into [0, 2q) without a correction step,
  so the multiplier has no final subtraction;
* the inverse-transform subtraction is computed as a − b + 2q, which lies in
  [0, 4q) and goes straight into the multiplier;
* the factor 1/2 that each inverse stage needs is split in two. On the
  multiplier path it is folded into the twiddle table. On the adder path it
  is merged with the adder's own range correction into a single add-constant
  and shift.

The price is W = ⌈log₂ q⌉ + 3 bits per word. The design supports two widths:
W = 17 for moduli up to 14 bits, and W = 34 for moduli up to 31 bits.

## Number representation

A residue x is held as X ≡ x·R (mod q) with 0 ≤ X < 2q. Each residue
therefore has two encodings, X and X + q, and the hardware never needs to
choose one. Why the ranges close:

* **Montgomery product.** mont(A, B) = (A·B + q·[A·B·μ mod R]) / R with
  μ = −q⁻¹ mod R. If A < 4q and B < 2q, the result is below
  (8q² + qR)/R < 2q, because R > 8q.
* **Forward butterfly** (a + bω, a − bω):
  * a + bω < 4q. The adder subtracts 2q when the sum is 2q or more.
  * a − bω lies in (−2q, 2q). The subtractor adds 2q when the difference is
    negative.
* **Inverse butterfly** ((a + b)/2, (a − b)·ω/2):
  * a − b + 2q lies in (0, 4q) and is multiplied by a twiddle that was
    divided by two when the table was built.
  * The sum s = a + b lies in [0, 4q) and must be halved modulo q:
    * s even: s/2.
    * s odd and s < 2q: (s + q)/2.
    * s odd and s ≥ 2q: (s − q)/2.

    All three results are below 2q. Together with the forward case, this is
    one adder with a choice of four constants (0, +q, −q, −2q) and an
    optional one-bit shift (`mod_add_div2`).

The host converts to and from Montgomery form and may reduce final results to
[0, q). Inputs may be given in either encoding.

## The butterfly PE (`ntt_bfu`)

Each PE accepts one butterfly per cycle and delivers it 8 cycles later:

| stage | work |
|---|---|
| 1 | a − b + 2q: carry-save adder over (a, ¬b, 2q), then one adder with carry-in 1. Selects b (forward) or a − b + 2q (inverse) as the multiplicand. Registers it together with the twiddle. |
| 2–7 | Montgomery multiplier: three DSP levels of two register stages each |
| 8 | Forward: a + m and a − m with their corrections. Inverse: the merged add/halve of a + b, with b' = m. Output registers. |

The PE latency of 8 and the six-stage multiplier come from the original
design. How the two remaining stages are used is this implementation's
choice.

A `bypass` input passes a and b through with the same latency. The control
unit uses it in the last pass when log₂ N is not a multiple of the number of
array columns.

## Montgomery multipliers on DSP slices

Both multipliers are built from `dsp_mul`, a generic 17×17 multiplier with a
post-adder and two register stages. It stands for one FPGA DSP slice, and
synthesis maps it onto one.

* **`mont_mul_17`** (3 DSPs):
  * DSP 1 computes ab = a·b.
  * DSP 2 computes p = ab[16:0]·μ and keeps the low 17 bits.
  * DSP 3 computes p·q + ab in its post-adder.
  * The result is bits [33:17].
* **`mont_mul_34`** (11 DSPs):
  * a·b uses four DSPs, combined by a carry-save adder and one carry-propagate
    adder.
  * The product mod R times μ uses only three DSPs. The high×high partial
    product lies entirely above 2³⁴ and is dropped.
  * q·p + a·b uses four DSPs. Two of them absorb the low and high halves of
    a·b in their post-adders.
  * The result is bits [67:34].

Both multipliers have a latency of 6 cycles and accept one product per cycle.

## The PE array and its interconnect (`pe_array`)

The array has ROWS × COLS PEs. Coefficients move only from one column to the
next. Each PE receives its own twiddle factor straight from the twiddle memory.
One pass through the array applies COLS consecutive transform stages.

* **Groups.** The rows form groups of G = 2^(COLS−1) PEs. Each group holds
  2^COLS coefficients, called elements e.
* **Pairing.** Column t pairs the two elements whose numbers differ in bit
  COLS−1−t. The element with that bit 0 goes to port a of PE g, and the one
  with that bit 1 goes to port b. Here g is e with that bit removed.
* **Routing.** This one rule fixes every link between columns. For a 4 × 2
  array, each PE in column 0 feeds both PEs of its pair in column 1. The rule
  carries the same pattern over to any power-of-two size.
* **Control timing.** The array delays mode and bypass by 8 cycles per
  column, so consecutive passes can follow each other without a gap.

## Memory mapping and schedule (the hard part)

The array consumes 2·ROWS coefficients per cycle and produces as many. The
coefficient memory (`coeff_mem`) has one bank per lane and 2·ROWS banks in
all, so every access set must touch each bank exactly once, in every pass and
in both directions.

**Bank mapping.** Let LOGB = log₂(2·ROWS).

* The bank of index i is the XOR of i's LOGB-bit chunks.
* The word address inside the bank is i >> LOGB.

Flipping any LOGB *consecutive* index bits moves a word through all banks,
because those bits land on distinct bank bits. So a set of indices that
differs only inside a window of LOGB consecutive bits is conflict-free,
wherever the window sits.

**Index generation (`ntt_ctrl`).** A transform is ⌈log₂ N / COLS⌉ passes of
N/(2·ROWS) issue cycles. Forward stage s pairs indices that differ in bit
log₂N − 1 − s. Inverse stage s pairs indices that differ in bit s. For each
pass the control unit:

1. chooses a window of LOGB consecutive bits that contains the pass's COLS
   butterfly bits;
2. gives the window bits to the lanes: first the bits paired by columns
   0, 1, …, then the PE group number;
3. takes all other index bits from a cycle counter, in ascending order.

Results are written back in place to the indices they were read from. The
forward transform takes natural-order input and gives bit-reversed output,
using Cooley–Tukey butterflies. The inverse takes bit-reversed input and gives
natural-order output, using Gentleman–Sande butterflies. Because the inverse
halves at every stage, its output is already scaled by 1/N.

**Hazards.** A result is written back 17 cycles after its read: 1 cycle of
memory read plus 2 × 8 cycles in the PEs. The next pass may need it before
then.

* Every memory word carries a one-bit tag: the parity of the pass that last
  wrote it.
* The control unit issues a read set only when all its words carry the
  previous pass's parity. Otherwise it stalls for one cycle (`stall`).

At the default size this costs 2 cycles per transform, at the hand-over
between the last two passes. The original design uses a published
conflict-free and bubble-free schedule that it does not spell out. This
mapping and stall scheme replace it.

**Cycle count.** One transform takes
passes × N/(2·ROWS) + 1 + 8·COLS + stalls cycles:

* N = 1024 on 8 × 2: 5 × 64 + 17 + 2 = **339** cycles.

## Twiddle tables (`twiddle_mem`)

The tables are computed off-chip for each modulus and loaded through `tw_*`.
The memory keeps one copy per PE, so each PE can read every cycle. The table
has 2N words:

* words 0 … N−1 hold the forward table;
* words N … 2N−1 hold the inverse table.

The PE of column t that handles index bit p, with the index on its a-port
equal to i₀, reads entry j = 2^(log₂N−1−p) + (i₀ >> (p+1)). Its address bit
log₂N selects the inverse table. Together these make entry 2^s + k the
twiddle of block k in forward stage s. The same layout is used by the
reference code of ML-DSA.

* **Cyclic transform** (A_k = Σ a_j ω^{jk}, where ω is an N-th root of
  unity): forward entry 2^s + k = ω^{(N/2^{s+1})·brv_s(k)}.
* **Negacyclic transform**, as used by the lattice schemes
  (A_k = Σ a_j ψ^{j(2k+1)}, where ψ is a 2N-th root of unity and q ≡ 1 mod
  2N): forward entry j = ψ^{brv_{log₂N}(j)}.
* **Inverse entries:** inverse entry j = (forward entry j)⁻¹ · 2⁻¹ mod q.

All entries are stored in Montgomery form. The hardware is identical for
both transform kinds; only the loaded table differs.

## Using the accelerator (`ntt_top`)

Ports:

* `start`, `mode`: begin a transform; `mode` = 1 is forward, 0 is inverse.
* `q`, `mu`: the modulus and μ = −q⁻¹ mod 2^W.
* `busy`, `done`, `cycles`, `stall`: status outputs.
* `h_*`: a one-word host port to the coefficients.
* `tw_*`: twiddle table loading.

Sequence:

1. Set `q` and `mu`, and load all 2N twiddles.
2. While `busy` is low, write all N coefficients through
   `h_we`/`h_idx`/`h_wdata`. After reset, every coefficient must be written
   once before the first start, because this sets its tag.
3. Pulse `start` for one cycle with `mode`.
4. When `done` pulses, read the results through `h_idx`/`h_rdata`, which have
   one cycle of latency.

A forward transform followed by an inverse one returns the input, in the
Montgomery domain. `cycles` then holds the transform's length.

## Sizes and how they compare

The synthesis parameters of `ntt_top` are:

| parameter | default | meaning |
|---|---|---|
| `W` | 34 | word width; 17 or 34 (selects the multiplier) |
| `LOGN` | 10 | log₂ N |
| `ROWS` | 8 | PE rows; a power of two |
| `COLS` | 2 | PE columns; at most log₂(2·ROWS) |

N and the array shape are fixed when the design is built; only q changes at
run time. Every configuration of the published evaluation has been simulated
with both datapath widths:

| N | PEs | published cycles | this RTL |
|---|---|---|---|
| 256 | 1×1 | 1032 | 1033 |
| 256 | 8×1 | 136 | 139 |
| 256 | 2×2 | 272 | 275 |
| 512 | 1×1 | 2312 | 2313 |
| 512 | 16×1 | 152 | 155 |
| 512 | 4×2 | 304 | 339 |
| 1024 | 1×1 | 5128 | 5129 |
| 1024 | 32×1 | 168 | 171 |
| 1024 | 8×2 | 336 | 339 |

Why the counts differ:

* **+1 cycle everywhere.** The coefficient read is a registered memory
  access.
* **+2 cycles on the arrays.** These are the read-after-write stalls of the
  stall scheme above.
* **N = 512 on 4×2.** Nine stages do not divide into two-column passes. This
  design bypasses the unused column in the fifth pass, which then takes as
  long as any other pass. The published figure of 304 implies the last
  single-stage pass runs at twice the rate, which the published description
  does not explain.

## Departures from the original design

* The conflict-free memory mapping and the bubble-free schedule come from
  earlier work and are not described in the original. The XOR bank mapping,
  the window/counter index generation and the tag-based stall are this
  design's own.
* The last pass uses column bypass when log₂ N is not a multiple of COLS (see
  above).
* The DSP slice is a generic multiply-add model, not the vendor primitive.
  Memories are plain arrays, which map to block RAM.
* The original 34-bit multiplier drawing labels each DSP output as 34 bits.
  Here each DSP output is kept at 35 bits (the 34-bit product plus the
  post-adder carry), and partial products are assigned to post-adders by
  their weights.
* Twiddle generation and Montgomery conversion are left to the host, as in
  the original, where twiddles are computed offline.
* Each of the pipeline registers is a placement choice, beyond the counts
  (PE 8, multiplier 6, DSP 2) given by the original.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it shows |
|---|---|
| `tb_dsp_mul` | exact x·y + z with 2-cycle latency |
| `tb_mont_mul_17`, `tb_mont_mul_34` | exact Montgomery products for random odd moduli (ML-KEM, ML-DSA, 31-bit maximum); result < 2q; 6-cycle latency |
| `tb_mod_add_div2`, `tb_mod_sub_corr` | all correction cases, both widths |
| `tb_ntt_bfu` | bit-exact against a reference butterfly, random mode and bypass each cycle; 8-cycle latency; congruence with the butterfly definition |
| `tb_pe_array` | 8 × 2 array against a reference model of the routing rule; 16-cycle latency |
| `tb_coeff_mem` | host port; random conflict-free lane reads and writes; the tag/ready logic |
| `tb_twiddle_mem` | all ports, one-cycle reads |
| `tb_ntt_ctrl` | bank-conflict freedom, each index once per pass, no read before write-back, write-back exactly 17 cycles after the read, column-0 pairing and twiddle addresses, 339 cycles |
| `tb_ntt_top` | N = 128 on 4 × 2 at 17 bits; q = 12289 (cyclic) and q = 3329 (negacyclic), forward and inverse. Every output is checked against a direct O(N²) evaluation; redundant inputs are used. Counts stalls, bypass, both modes, modulus change and both table kinds, and fails if any never happened. |
| `tb_ntt_top_full` | default parameters (N = 1024, 8 × 2, 34 bits); q = 8380417 (ML-DSA, negacyclic) and q = 2013265921 (31 bits, cyclic); 339 cycles each |
| `tb_ntt_workloads` | all 18 published configurations (table above, at 14- and 31-bit moduli), negacyclic forward and inverse |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ntt_pkg.sv tb/tb_ntt_top_full.sv --top-module tb_ntt_top_full
./obj_dir/Vtb_ntt_top_full
```

`tb_ntt_workloads` also needs `tb/ntt_workload_run.sv` on the command line.
`tb/ntt_tb_body.svh` holds the end-to-end sequence shared by the top-level
testbenches, and `tb/bfu_ref.svh` holds the reference butterfly.

## Files

| file | content |
|---|---|
| `rtl/ntt_pkg.sv` | mode type, latencies, bank/address functions |
| `rtl/dsp_mul.sv` | DSP slice model |
| `rtl/mont_mul_17.sv`, `rtl/mont_mul_34.sv` | Montgomery multipliers |
| `rtl/mod_add_div2.sv` | merged modular adder / halver |
| `rtl/mod_sub_corr.sv` | subtractor with +2q correction |
| `rtl/ntt_bfu.sv` | unified butterfly PE |
| `rtl/pe_array.sv` | PE array and interconnect |
| `rtl/coeff_mem.sv` | banked coefficient memory |
| `rtl/twiddle_mem.sv` | twiddle tables |
| `rtl/ntt_ctrl.sv` | control unit |
| `rtl/ntt_top.sv` | top level |
