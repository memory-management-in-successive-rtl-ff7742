# A compact-memory SC decoder for multi-kernel polar codes

Polar codes built from the 2x2 kernel alone only come in lengths that are
powers of two. Multi-kernel polar codes mix kernels of different sizes, so
that the transformation matrix is a Kronecker product

    G_N = T_{p_1} x T_{p_2} x ... x T_{p_s},      N = p_1 * p_2 * ... * p_s,

and a length such as 12 = 2*2*3 or 972 = 2*2*3^5 is reached directly. This
RTL is a successive-cancellation (SC) decoder for such codes whose memory
does not grow as N*(s+1) LLRs and N*s partial sums, as a decoder that keeps
every value of the Tanner graph would, but stays below 2N LLRs and N partial
sums. The savings come from the order in which SC decoding uses its data:
once stage j has produced the LLRs for the sub-code it is working on, the
larger vector behind it is not needed until that sub-code is finished, so
each stage only has to hold one sub-code's worth of values.

The default build decodes the length-12 code of `G_12 = T_2 x T_2 x T_3`.
The kernel sequence is a parameter; kernels of size 2 and 3 are supported.

## Kernels and bit order

The two kernels are

    T_2 = | 1 0 |        T_3 = | 1 1 1 |
          | 1 1 |              | 1 0 1 |
                               | 0 1 1 |

and a codeword is `x = u * G_N`. Frozen positions of `u` are 0.

The index `i` of a bit `u_i` is handled as a mixed-radix number whose
digits `b_1 .. b_s` have radices `p_1 .. p_s`, with `b_1` the most
significant digit:

    i = b_s + b_{s-1}*p_s + b_{s-2}*p_{s-1}*p_s + ...

For `G_12` (radices 2, 2, 3):

| i   | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 |
|-----|---|---|---|---|---|---|---|---|---|---|----|----|
| b_1 | 0 | 0 | 0 | 0 | 0 | 0 | 1 | 1 | 1 | 1 | 1  | 1  |
| b_2 | 0 | 0 | 0 | 1 | 1 | 1 | 0 | 0 | 0 | 1 | 1  | 1  |
| b_3 | 0 | 1 | 2 | 0 | 1 | 2 | 0 | 1 | 2 | 0 | 1  | 2  |

The digits decide everything: digit `b_j` selects which LLR function
stage `j` applies, and which column of that stage's partial-sum matrix the
bit feeds.

## Memory organisation

Write `M_j = p_{j+1} * ... * p_s` (so `M_0 = N` and `M_s = 1`).

| structure | shape | content |
|-----------|-------|---------|
| `Lambda_0` | N LLRs | channel LLRs, in digit-reversed order (see below) |
| `Lambda_j`, j = 1..s | `M_j` LLRs | LLRs of the sub-code stage j is decoding; `Lambda_s(0)` is the LLR of the current bit |
| `Pi_j`, j = 1..s | `M_j` rows x `W_j` columns | partial sums: row k, column c is input `u_c` of kernel k of stage j |
| `Upsilon` | N bits | decoded bits |

`W_j = p_j` for the inner stages and `p_j - 1` for `Pi_1` and `Pi_s`.
The last column of `Pi_s` is not stored because it is consumed in the
cycle it is produced. The last column of `Pi_1` is not stored because it
would only be complete after the last bit, when there is nothing left to
decode.

The LLR recursion is

    Lambda_j(k) = f^{p_j}_{b_j}( Lambda_{j-1}(k*p_j .. k*p_j + p_j - 1),
                                 Pi_j(k, 0 .. b_j - 1) ),   k = 0 .. M_j - 1

so kernel k of stage j always reads `p_j` *consecutive* entries of the
vector before it. When column `p_j - 1` of `Pi_j` has been filled, every
row goes through the kernel once more, in the other direction:

    [Pi_{j-1}(k*p_j + c, b_{j-1})]_{c=0..p_j-1} = [Pi_j(k, 0 .. p_j-1)] * T_{p_j}

For `G_12`:

| stage j | kernel | `Lambda_j` entries | `Pi_j` rows x columns |
|---------|--------|-------------------|------------------------|
| 0 | - | 12 | - |
| 1 | T_2 | 6 | 6 x 1 |
| 2 | T_2 | 3 | 3 x 2 |
| 3 | T_3 | 1 | 1 x 2 |

That is 22 LLRs and 14 partial-sum bits, against 48 LLRs and 36 partial
sums for a decoder that stores the whole Tanner graph. The design is fully
parameterised. These are the sizes it builds for the code lengths the
scheme is usually compared at, with kernels of size 2 placed before kernels
of size 3:

| N | kernels | LLRs | PS bits | full Tanner graph LLRs / PSs | cycles per codeword |
|---|---------|------|---------|------------------------------|---------------------|
| 12  | 2,2,3 | 22 | 14 | 48 / 36 | 32 |
| 72  | 2,2,2,3,3 | 139 | 101 | 432 / 360 | 194 |
| 144 | 2,2,2,2,3,3 | 283 | 209 | 1008 / 864 | 393 |
| 384 | 2,2,2,2,2,2,2,3 | 766 | 572 | 3456 / 3072 | 1143 |
| 972 | 2,2,3,3,3,3,3 | 1822 | 1334 | 7776 / 6804 | 2588 |

The LLR counts equal `(...((p_1+1)p_2+1)...)p_s + 1`. The closed form
usually quoted for the partial sums, `(...((p_1 p_2+1)p_3+1)...)p_s`, gives
15, 102, 210, 573 and 1335. That is one bit more than this design stores in
every case; the column widths here are those argued above.

## The per-bit schedule

`mk_sc_ctrl` keeps `i` as a digit counter and, for each bit, runs three
phases. Each takes whole clock cycles.

**LLR update.** Only the vectors that depend on a changed digit are
recomputed. If `z` is the position of the rightmost nonzero digit of `i`
(z = 1 for i = 0), then `Lambda_1 .. Lambda_{z-1}` are still valid from the
previous bit. The controller updates `Lambda_z, ..., Lambda_s`, one vector
per cycle, vector j with function `f_{b_j}`; this is `f_0` for every `j > z`
because those digits are 0. Over a codeword, vector j is updated
`p_1 * ... * p_j` times. For `G_12` that is 2 + 4 + 12 = 18 vector updates
instead of 36.

**Decision.** One cycle. `u_i` is 0 if `i` is frozen. Otherwise it is 1
when `Lambda_s(0)` is negative and 0 when it is zero or positive. It is
written to `Upsilon`. In the same cycle the bit enters the partial-sum
matrices:

* if `b_s < p_s - 1`, `u_i` goes to column `b_s` of `Pi_s`;
* if `b_s = p_s - 1` (the last-stage kernel is complete), the row
  `[Pi_s(0, 0..p_s-2), u_i] * T_{p_s}` is written straight into column
  `b_{s-1}` of `Pi_{s-1}`.

**Partial-sum cascade.** A column write that fills the last column of
`Pi_j` (`b_j = p_j - 1`, `j >= 2`) triggers, in the next cycle, the write of
column `b_{j-1}` of `Pi_{j-1}`. This repeats for as long as the digits are
at their maximum. After the last bit no partial sums are updated.

The digit counter then increments. The carry stops exactly at the new `z`,
so the next LLR update starts there.

Cycles per bit are `(s - z + 1) + 1 + max(m - 1, 0)`, where `m` is the
number of trailing digits at their maximum. The last bit has no cascade.
One more cycle is added per codeword for `done`. The schedule for `G_12`:

| i | digits | LLR cycles (vector:function) | decision-cycle PS write | cascade | cycles |
|---|--------|------------------------------|-------------------------|---------|--------|
| 0 | 000 | 1:f0 2:f0 3:f0 | Pi_3 col 0 | - | 4 |
| 1 | 001 | 3:f1 | Pi_3 col 1 | - | 2 |
| 2 | 002 | 3:f2 | Pi_2 col 0 (via T_3) | - | 2 |
| 3 | 010 | 2:f1 3:f0 | Pi_3 col 0 | - | 3 |
| 4 | 011 | 3:f1 | Pi_3 col 1 | - | 2 |
| 5 | 012 | 3:f2 | Pi_2 col 1 (via T_3) | Pi_1 col 0 (via T_2) | 3 |
| 6 | 100 | 1:f1 2:f0 3:f0 | Pi_3 col 0 | - | 4 |
| 7 | 101 | 3:f1 | Pi_3 col 1 | - | 2 |
| 8 | 102 | 3:f2 | Pi_2 col 0 (via T_3) | - | 2 |
| 9 | 110 | 2:f1 3:f0 | Pi_3 col 0 | - | 3 |
| 10 | 111 | 3:f1 | Pi_3 col 1 | - | 2 |
| 11 | 112 | 3:f2 | none (last bit) | - | 2 |

Total: 31 cycles, plus the `done` cycle, gives 32.

## Channel LLR order

Stage 1 reads consecutive pairs (or triples) of `Lambda_0`, but in
`x = u * G_N` the code bits that one stage-1 kernel combines lie `M_1`
apart. `mk_chan_mem` therefore stores each channel LLR at a permuted
address. The driver presents LLRs in natural order: `llr_idx = n` for code
bit `x_n`. Writing `n = c_1*M_1 + c_2*M_2 + ... + c_s` (digits with radices
`p_1..p_s`), the LLR is stored at

    q = c_1 + c_2*p_1 + c_3*p_1*p_2 + ... ,

which is the same digits read in reverse order. With this single
permutation at the input, every later stage also finds its inputs
consecutive, and the permutations between the stages of the Tanner graph
vanish. For `G_12`, n -> q is 0->0, 1->4, 2->8, 3->2, 4->6, 5->10, 6->1,
7->5, 8->9, 9->3, 10->7, 11->11.

## Kernel arithmetic

The kernel LLR functions are min-sum approximations, with
`a [+] b = sign(a) sign(b) min(|a|,|b|)` and a positive LLR meaning 0:

| kernel | f_0 | f_1 | f_2 |
|--------|-----|-----|-----|
| T_2 | L0 [+] L1 | L1 + (-1)^u0 L0 | - |
| T_3 | L0 [+] L1 [+] L2 | (-1)^u0 L0 + (L1 [+] L2) | (-1)^u0 L1 + (-1)^(u0^u1) L2 |

Here `u0, u1` are the kernel's already-known inputs, taken from row k of
`Pi_j`. The T_3 functions follow from `x0 = u0^u1, x1 = u0^u2,
x2 = u0^u1^u2`. LLRs are `Q` bits (default 6), two's complement, and
saturate symmetrically to +-(2^(Q-1)-1). A channel value of -2^(Q-1) is
clamped on entry. With the symmetric range, `|a|` never overflows.

## Interface of `mk_sc_decoder`

| port | dir | width | use |
|------|-----|-------|-----|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `llr_we`, `llr_idx`, `llr_in` | in | 1, clog2 N, Q | load one channel LLR per cycle, natural order, only while not busy |
| `frozen` | in | N | bit i = 1 freezes `u_i`; hold stable while busy |
| `start` | in | 1 | one-cycle pulse while idle; clears `Lambda_1..s`, `Pi`, `Upsilon` |
| `busy` | out | 1 | from the cycle after `start` until `done` |
| `done` | out | 1 | one cycle, after the last decision |
| `bit_valid`, `bit_idx`, `bit_val` | out | 1, clog2 N, 1 | each decision in the cycle it is made, in index order |
| `u_hat` | out | N | all decisions; complete at `done`, held until the next `start` |

Parameters: `S` (number of kernels), `P[1:S]` (kernel sizes, 2 or 3, first
entry = `p_1`), `Q`. `N` follows from `P`. Loading takes N cycles, and
decoding takes the cycle count given in the schedule section. The channel
memory is not cleared by `start`, so the next codeword can be loaded while
`u_hat` is read. Every stage has its own kernels: stage j instantiates
`M_j` LLR kernels and `M_j` partial-sum kernels, so all of a vector is
updated in one cycle.

## Files

| file | contents |
|------|----------|
| `rtl/mk_pkg.sv` | digit width, controller state type, kernel columns |
| `rtl/mk_kernel_llr.sv` | one kernel's LLR function (T_2 or T_3), min-sum, saturating |
| `rtl/mk_kernel_ps.sv` | one kernel's partial-sum update `x = u * T_p` |
| `rtl/mk_llr_stage.sv` | `Lambda_j` and its `M_j` parallel LLR kernels |
| `rtl/mk_ps_stage.sv` | `Pi_j`, its column write and the kernels producing `Pi_{j-1}`'s column |
| `rtl/mk_chan_mem.sv` | `Lambda_0` with the digit-reversing write |
| `rtl/mk_hard_dec.sv` | frozen check and sign decision |
| `rtl/mk_ubits.sv` | `Upsilon` |
| `rtl/mk_sc_ctrl.sv` | digit counter and per-cycle schedule |
| `rtl/mk_sc_decoder.sv` | top level |

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv` that prints
`TB_RESULT checks=N failures=M`. The references are written independently
of the RTL (`tb/mk_tb_ref_pkg.sv`). They include the kernel matrices, an
encoder working directly from the Kronecker product, and a plain
natural-order SC decoder that recomputes each bit's LLR chain from the
channel vector and re-encodes earlier sub-blocks for its partial sums. That
reference does not use the compact memory layout at all.

* `tb_mk_sc_decoder` runs the default `G_12` decoder on 40 noiseless
  codewords, which must decode to the sent bits, and on 160 noisy ones,
  which must match the reference bit for bit. It checks every codeword's
  cycle count against the formula above and the 18 vector updates per
  codeword. It also counts, and requires, each mechanism: LLR updates
  starting after `Lambda_1`, the direct `Pi_s -> Pi_{s-1}` write, a
  partial-sum cascade, the skipped update after the last bit, and a frozen
  bit overriding a negative LLR.
* `tb_mk_workloads` instantiates the decoder for N = 72, 144, 384 and 972
  and decodes a few codewords at each size. It also checks that the
  instantiated LLR storage equals the counts in the table above. Building
  it takes several minutes, mostly for the N = 972 instance.
* `tb_mk_sc_ctrl` compares the controller cycle by cycle with a schedule
  generated from the LLR-update and PS-update rules, for kernel orders
  2,2,3 and 3,2,2.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/mk_pkg.sv tb/mk_tb_ref_pkg.sv tb/tb_mk_sc_decoder.sv \
        --top-module tb_mk_sc_decoder -o sim && ./obj_dir/sim

## Where this RTL makes its own choices

The memory layout, update equations, LLR-update start rule, partial-sum
cascade and decision rule follow the published scheme. The following
points are choices made here, or resolve gaps and inconsistencies in the
description:

* **LLR functions.** The scheme only fixes the form
  `l_b = f_b(L, u_0..u_{b-1})`. The min-sum functions above, `Q = 6`,
  saturation and the zero-decides-0 tie rule are choices made here.
* **Sign convention.** The scheme states that negative LLRs mean 1, but
  its decision formula `(sgn(LLR)+1)/2` would map a positive LLR to 1. The
  stated convention is used.
* **Input permutation.** The scheme requires a permutation of the channel
  LLRs before they enter `Lambda_0` but does not spell it out. The digit
  reversal above is derived here and is verified against the
  natural-order reference decoder.
* **Width of `Pi_1`.** The text gives every inner matrix `p_j` columns. The
  memory drawing of the `G_12` example shows `Pi_1` with one column, and
  that is what is built. See also the one-bit difference in the
  partial-sum counts noted above.
* **Index typos.** The LLR-update pseudo-code's final loop `j = z+1 .. z`
  is read as `z+1 .. s`. The index-level partial-sum formula (with
  `floor(k/p_{j-1})` and `c = (k mod p_{j+1}) + 1`) is inconsistent; the
  row-times-kernel form given in the text is implemented instead.
* **Hardware mapping.** The scheme is architecture-neutral. The choices
  made here are: one cycle per vector or matrix column, a fully parallel
  stage, flip-flop storage, its own kernels for every stage (no sharing
  between stages), the load/start/done interface and an asynchronous
  reset. A semi-parallel version would reuse `P` kernels over `M_j/P`
  cycles per vector without changing the memory layout.
* **Kernel sizes.** Only 2 and 3 are supported, because the kernel
  functions are written out for those two.
* **Code length.** The default is N = 12. Other lengths are selected with
  the parameters `S`/`P`, not by a single build that handles several
  lengths.
