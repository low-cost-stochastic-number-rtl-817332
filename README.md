# Shared-LFSR stochastic number generators with permuted wiring

Stochastic computing represents a value p in [0, 1] as a bit stream in which
a fraction p of the bits are 1. Arithmetic then becomes very cheap: an AND
gate multiplies two independent streams, a multiplexer adds them with a
weight. The expensive part is the stochastic number generator (SNG) that
turns a binary number into such a stream: a random number source, normally a
linear feedback shift register (LFSR), plus a probability conversion circuit
(PCC). A circuit with many inputs needs many SNGs, and the LFSRs then
dominate its area.

Sharing one LFSR between several SNGs removes most of that area, but if every
SNG sees the same random number the streams are perfectly correlated and an
AND gate computes min(a, b) instead of a·b. The design here, after S. A.
Salehi, "Low-cost Stochastic Number Generators for Stochastic Computing",
shares one LFSR and gives each SNG a *different permutation of the LFSR's
output wires*. A permutation of a maximal-length LFSR state still visits
every number 1..2^n-1 once per period, so each SNG still produces exactly
the right number of ones; only their order changes. Wiring costs nothing, so
the decorrelation is free. For two SNGs the best permutation is the full
bit reversal: the second SNG reads the LFSR upside down.

The RTL is parameterised in the LFSR width N, the number of SNGs M, the
permutation of each SNG and the PCC type. Its defaults are the main
configuration of the publication: one 8-bit LFSR, two SNGs, the first wired
directly and the second reversed, with comparator PCCs.

```
            +--------+  L1..L8   +----------------+ r1..r8  +-----+
  clk ----->|  LFSR  |----+----->| direct wiring  |-------->| PCC |--> s[0]
            | 8 bit  |    |      +----------------+         +-----+
            +--------+    |                                     ^ x[0]
                          |      +----------------+ r1..r8  +-----+
                          +----->| reversed wiring|-------->| PCC |--> s[1]
                                 | r_i = L_(9-i)  |         +-----+
                                 +----------------+             ^ x[1]
```

## Files

| file | contents |
|---|---|
| `rtl/sng_pkg.sv` | PCC type enum, LFSR feedback taps for N = 2..16, `factorial`, and `perm_rlex`, which decodes a permutation index |
| `rtl/lfsr.sv` | the shared random number source |
| `rtl/pcc_cmp.sv` | comparator PCC |
| `rtl/pcc_wbg.sv` | weighted binary generator PCC |
| `rtl/perm_sng.sv` | one SNG: permuted wiring from the LFSR plus a PCC |
| `rtl/shared_lfsr_sngs.sv` | top: one LFSR shared by M SNGs |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus a full-size one |
| `tb/sng_sweep.sv`, `tb/sc_tb_pkg.sv` | testbench helpers: a sweep driver, SCC and a reference permutation generator |

## The random source

`lfsr` is a Fibonacci LFSR with flip-flops L1..Ln, exposed as `q[i-1] = L_i`.
Each enabled cycle it shifts toward L1 (`L_i <= L_(i+1)`), and Ln takes the
XOR of the tapped flip-flops. For N = 4 the feedback is L2 xor L1. Started
from 0001, it runs 0001, 1000, 0100, 0010, 1001, 1100, 0110, 1011, 0101,
1010, 1101, 1110, 1111, 0111, 0011 (written L4 L3 L2 L1), which is the
sequence the publication tabulates. The publication gives no taps for other
widths. The ones in `sng_pkg::lfsr_taps` were found by exhaustive search for
period 2^N-1 with this shift direction. The choice does not matter for the
correlation figures: any maximal-length LFSR visits the same set of numbers,
only in another order. The correlation of two streams taken over a full
period depends only on how often each pair of bits occurs, not on their
order.

Reset is synchronous and active low, and loads `SEED` (default 1, as in the
publication's example). When `en` is low the state holds. An assertion checks
that the state never becomes zero.

## Permutation numbering

A permutation is given by its index k in **reverse lexicographic order** of
the permutations of [1..n]. This is the order MATLAB's `perms` produces. For
n = 4 the order is

```
k = 1: [4,3,2,1]   k = 2: [4,3,1,2]   k = 3: [4,2,3,1]  ...  k = 24: [1,2,3,4]
```

Element i of permutation PL_k names the LFSR flip-flop that drives PCC input
r_i: `r_i = L_(PL_k(i))`. So k = n! is the direct connection and k = 1 is the
reversal (`r_i = L_(n-i+1)`). `sng_pkg::perm_rlex(n, k)` decodes the index at
elaboration time by treating n! - k as a rank in factorial base. The index is
a 64-bit parameter, so every n up to 16 can be addressed. The hardware result
is wires only: `perm_sng` has no logic of its own beyond its PCC.

The publication chooses permutations by their average stochastic-computing
correlation. SCC is a correlation measure that is 0 for independent streams
and ±1 for maximally overlapping or disjoint ones. SCC_avg(SNG1, SNG2) is the
mean of |SCC| between SNG1's stream for x and SNG2's stream for y, over all
inputs. For two SNGs the reversal minimises it at every width examined. For
three or more SNGs the publication searches for the set whose largest
pairwise SCC_avg is smallest, and lists index sets for n = 4..7. In this RTL
those sets are just parameter values (`M`, `PERM_IDX`).

## The two conversion circuits

Both PCCs are combinational. Each takes the permuted random number r and the
binary input x and gives one bit per cycle. Over one LFSR period, each
produces exactly x ones out of 2^n-1.

**Comparator (`pcc_cmp`)**: `s = (r <= x)`. The publication's prose says
"less than", but its worked example (x = 1011) gives a 1 for r = 1011 and
counts 11 ones in 15, and elsewhere it states that a period holds x ones.
Only `<=` satisfies all of these, because r never takes the value 0.

**Weighted binary generator (`pcc_wbg`)**: a priority chain turns r into
one-hot weights. The weight for the most significant set bit of r is 1; all
others are 0. That weight selects the x bit of the same significance:
`s = x[msb_index(r)]`. Bit j of x is thus selected in 2^j of the 2^n-1 cycles,
which again gives x ones. The publication's gate drawing labels the chain
with the LFSR bits in the opposite order (L1 first). Only the MSB-first
chain reproduces the published 15-bit example stream, so that is what is
built. The WBG gives lower correlation than the comparator at the same cost,
for example 0.085 against 0.130 at n = 8.

`PCC` selects the type per instance of `shared_lfsr_sngs`. It is the same for
all SNGs of a group. The publication examines both types and does not tie its
application results to one of them. CMP is the default here.

## Top level: `shared_lfsr_sngs`

| parameter | default | meaning |
|---|---|---|
| `N` | 8 | LFSR width; streams have period 2^N-1 |
| `M` | 2 | number of SNGs |
| `PCC` | `PCC_CMP` | `PCC_CMP` or `PCC_WBG` |
| `SEED` | 1 | LFSR reset value, nonzero |
| `PERM_IDX` | `{64'd1, 64'(N!)}` | packed `[M-1:0][63:0]`, permutation index of each SNG, element 0 in the low slice |

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock; one stochastic bit per SNG per enabled cycle |
| `rst_n` | in | 1 | synchronous active-low reset |
| `en` | in | 1 | advance the LFSR |
| `x` | in | `[M-1:0][N-1:0]` | binary input of each SNG |
| `s` | out | `[M-1:0]` | stochastic bit of each SNG |
| `lfsr_q` | out | N | shared LFSR state, `lfsr_q[i-1] = L_i` |

Timing: `s` is a combinational function of the registered LFSR state and of
`x`. After reset the first bit, for state SEED, is available at once. Each
enabled clock edge moves to the next bit. Any 2^N-1 consecutive enabled
cycles with constant `x[g]` contain exactly `x[g]` ones on `s[g]`. To use a
stream in a following stochastic circuit, sample it on the same clock. If
`x` must change only on period boundaries, the user controls that. The
circuit has no notion of a period start beyond `lfsr_q == SEED`.

For a group of more than two SNGs, override `M` and `PERM_IDX`. For example, a
5-bit, three-SNG group from the publication's search is
`#(.N(5), .M(3), .PERM_IDX({64'd88, 64'd44, 64'd12}))`.

At the default size, synthesis gives an 8-bit register with enable and reset,
a 4-input XOR for the feedback, and two 8-bit comparators.

## What the simulations show

The testbenches sweep every input through one LFSR period and compute the
statistics the publication reports. All of the following are checked:

* The 4-bit LFSR reproduces the published sequence. The SCC between its L2
  and L1 streams is -0.0816, as published.
* Both PCCs reproduce the published 15-bit example streams for x = 1011. For
  every x at N = 4 and N = 8, each gives exactly x ones per period.
* SCC_avg between the direct and the reversed SNG matches the publication's
  table of minimum values to its three decimals at every width from 4 to 10:

  | n | CMP measured | CMP published | WBG measured | WBG published |
  |---|---|---|---|---|
  | 4 | 0.4737 | 0.473 | 0.3869 | 0.387 |
  | 5 | 0.3729 | 0.372 | 0.2860 | 0.286 |
  | 6 | 0.2742 | 0.274 | 0.1982 | 0.198 |
  | 7 | 0.1925 | 0.192 | 0.1319 | 0.132 |
  | 8 | 0.1302 | 0.130 | 0.0849 | 0.085 |
  | 9 | 0.0856 | 0.086 | 0.0533 | 0.053 |
  | 10 | 0.0549 | 0.054 | 0.0328 | 0.033 |

  The averages run over the nonzero inputs 1..2^n-1. If x = 0 is included
  (its stream is constant and its SCC is taken as 0), the values come out
  lower by a factor (2^n-1)^2 / 2^(2n) and no longer match.
* Against every one of the 24 (n = 4) and 120 (n = 5) wirings, the reversal
  gives the lowest SCC_avg with the direct wiring, and the direct wiring
  against itself gives the highest. This holds for both PCC types at n = 4.
* Three SNGs on a 5-bit LFSR, with index sets {12, 44, 88} and {23, 46, 61},
  give pairwise SCC_avg of 0.4882, 0.4885 and 0.4887, as published.
* An AND-gate multiplier fed by the two default SNGs has an MSE of 0.000013
  over all 256 x 256 input pairs. The publication reports 0.00001. With
  simple sharing (both SNGs wired directly) the MSE is 0.011, against a
  published 0.01057.

## Where this departs from, or goes beyond, the publication

* Reset, enable, the seed parameter and the LFSR taps for N ≠ 4 are this
  design's own choices.
* Comparator `<=` and the MSB-first WBG chain follow the worked example, not
  the prose or the gate drawing (see above).
* The publication states the general two-SNG rule as "L_(n-i) to r_i". Its
  8-bit example and its figure both use L_(n-i+1), which is what is built.
* Of the published three-SNG permutation sets, only the n = 5 comparator sets
  are reproduced by this numbering. The comparator sets listed for n = 4 and 6,
  and the WBG sets for n = 4, 5 and 6, give pairwise SCC_avg values that
  differ from the published ones (the n = 7 sets were not evaluated): for example 0.6071 rather than 0.5470 for {4, 9, 24} at
  n = 4. The testbenches therefore only check the n = 5 sets. The hardware
  accepts any index, so a different set can simply be passed in.
* The publication also evaluates FIR filters, edge detection and image
  segmentation built from many SNGs. Those circuits come from other work and
  are not part of this RTL. Their SNG groups would need permutation sets for
  8-bit LFSRs with 3 or more SNGs, which the publication does not list.
* The comparator is written as `<=` and left to synthesis. The WBG is written
  as a priority chain. Neither copies a gate netlist.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/sng_pkg.sv tb/sc_tb_pkg.sv rtl/lfsr.sv rtl/pcc_cmp.sv rtl/pcc_wbg.sv \
    rtl/perm_sng.sv rtl/shared_lfsr_sngs.sv tb/sng_sweep.sv \
    tb/tb_shared_lfsr_sngs.sv --top-module tb_shared_lfsr_sngs
./obj_dir/Vtb_shared_lfsr_sngs
```

| testbench | what it runs | run time |
|---|---|---|
| `tb_lfsr` | published 4-bit sequence, periods at N = 4, 8, 10, hold, reset | < 1 s |
| `tb_pcc_cmp`, `tb_pcc_wbg` | published example, all (r, x) at N = 4 and 8 | < 1 s |
| `tb_perm_sng` | 10 permutations × 2 PCCs against a reference | < 1 s |
| `tb_shared_lfsr_sngs` | 16 configurations: N = 4..10 for CMP and WBG, and two three-SNG sets | about 2.5 min to build, 6 s to run |
| `tb_perm_sweep` | every permutation at n = 4 (CMP, WBG) and n = 5 (CMP) against the direct wiring | 30 s to build |
| `tb_shared_lfsr_sngs_full` | default parameters: full sweep, SCC_avg, multiplier MSE, random inputs | < 1 s |

To try another configuration, add a `sng_sweep` instance to
`tb_shared_lfsr_sngs` with its `N`, `M`, `PCC`, `PERM_IDX` and the expected
SCC_avg values.
