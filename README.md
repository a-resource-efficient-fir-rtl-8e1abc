# A 64-tap FIR filter that multiplies small coefficients with shared adders and large ones after symmetric pre-addition

A fixed-coefficient FIR filter, y(n) = Σ h(k)·x(n−k), needs one multiplication per
tap per sample. There are two standard ways to make that cheaper. Each works best for
a different kind of coefficient:

* **Symmetric pre-addition.** A linear-phase filter has h(k) = h(N−1−k). The two
  samples that meet the same coefficient can be added first and multiplied once. That
  halves the multipliers, but each remaining multiplier is a full general-purpose one.
* **A reduced adder graph (RAG).** When every product is a constant times the *same*
  sample, all of them can be built from shifts, adds and subtracts. Products made
  earlier serve as building blocks for later ones, so no multiplier is needed at all.
  This is cheap while the constants are small. Large constants need deep, wide adder
  graphs.

This design does both, choosing by coefficient size. The coefficients are ranked by
magnitude. The small half is produced by one shared shift-and-add graph. The large
half goes to a folded, pre-adding delay line with ordinary multipliers. The RTL
implements this for the 64-tap low-pass filter used as the worked example (sample rate
250 kHz, cut-off 20 kHz, integer coefficients).

## The coefficients and how they are split

The 64 coefficients are symmetric, h(n) = h(63−n). Taps 0..31 are:

```
  219   137   162   174   168   137    79    -9
 -127  -269  -428  -592  -747  -875  -957  -972
 -903  -733  -450   -49   470  1100  1825  2622
 3462  4311  5134  5891  6548  7072  7437  7624
```

The split rule works as follows:

1. Take magnitudes.
2. Drop duplicates (137 appears twice) and powers of two (there are none).
3. Of the remaining M = 31 distinct magnitudes, the (M−1)/2 = 15 smallest form the
   small set (**coeff-r**). The rest form the large set (**coeff-s**).

| set | magnitudes | taps (and their mirrors 63−k) | built by |
|---|---|---|---|
| coeff-r | 9 49 79 127 137 162 168 174 219 269 428 450 470 592 733 | 0–11, 17–20 | shared adder graph, 0 multipliers |
| coeff-s | 747 875 957 972 903 1100 1825 2622 3462 4311 5134 5891 6548 7072 7437 7624 | 12–16, 21–31 | pre-add, then 16 multipliers |

Each half covers 32 of the 64 taps.

`fir_pkg` holds the table and the coeff-r list. It also holds the split rule as a
function (`is_small`). At elaboration, `rag_pulsation_chain` checks every tap against
that rule. If the coefficient table is edited and the coeff-r list no longer matches,
the build stops with an error instead of sending a tap to the wrong half.

## The shared adder graph (`rag_mult_block`)

All 15 coeff-r products of the current input sample x come out of one combinational
network of 27 adders and subtractors. Each product is a sum of shifted copies of x
and of products built earlier:

```
depth 1   x9   = (x<<3) + x               x127 = (x<<7) - x
          x49  = (x9<<2) + x9 + (x<<2)    x79  = x127 - x49 + x
          x137 = x127 + x9 + x            x162 = x137 + x9 + (x<<4)
          x168 = x162 + (x<<2) + (x<<1)
          x174 = x127 + x49 - (x<<1)      x219 = x168 + x49 + (x<<1)
          x269 = x219 + x49 + x           x428 = x174 + (x127<<1)
          x450 = x428 + (x9<<1) + (x<<2)  x470 = x450 + (x9<<1) + (x<<1)
          x592 = x450 + x269 - x127       x733 = x592 + x137 + (x<<2)
```

In the source of this graph, two points needed a decision:

* **x219.** The source writes it with `− (x<<1)`. That evaluates to 215, not 219, and
  219 is the coefficient h(0). The sign here is `+`.
* **x269 and x428.** The source uses both but does not give their equations. The two
  lines above are this design's choice. Each reuses products already in the graph.

The graph is only as shallow as its dependencies allow. Products like x733 sit at the
end of a chain of several adders. Every intermediate value is a positive multiple of x
no larger than 733·x, so a width of DATA_W + 10 bits is exact throughout. The block has
no registers. Its outputs go straight into the registered processing elements.

## The small-coefficient half: a transposed pulsation chain (`rag_pulsation_chain`, `pulsation_pe`)

The shared graph only helps if all taps multiply the *same* sample. So the coeff-r taps
use the transposed ("broadcast input") systolic form.

* Every processing element (PE) sees the current sample.
* PE j adds or subtracts its product to the partial sum from PE j−1 and registers the
  result.
* PE 0 starts from zero.

Sixty-four PEs in a row produce Σ h(j)·x(n−63+j) at the end of the chain. Because h is
symmetric, that equals Σ h(k)·x(n−k), so the chain can be laid out with h(0) first.

Signs: the graph produces only positive multiples. Each PE has a `SIGN` parameter:
+1 adds, −1 subtracts (for the negative coefficients of taps 7..19), and 0 makes the
PE a plain delay. The 32 coeff-s taps are delay-only PEs. They keep the chain 64 deep,
so its output lines up in time with the other half. Synthesis keeps their registers:
in transposed form, those registers *are* the delays of the filter.

The source drawing of this chain puts each unit delay between multiplier and adder,
with no register on the sum path. As drawn, that would not compute a convolution. The
RTL puts the delay after the adder, which is the usual transposed form.

## The large-coefficient half: a folded symmetric delay line (`sym_section`, `sym_pe`)

The samples enter a forward delay line and travel through 32 registers. At the far end
the line turns back into a backward line. Element j therefore sees two taps:

* x(n−j) at its forward-line input;
* x(n−63+j) at its backward-line input.

These are exactly the two samples that share h(j). The element adds them, multiplies
the sum by h(j), and adds the product into a partial-sum chain. Only the 16 coeff-s
elements have the pre-adder and multiplier (`COEF ≠ 0`). The other 16 carry only the
delay line. The partial-sum chain is combinational, as in the source drawing, and is
registered once at its end.

Index bookkeeping, which is the easy thing to get wrong here:

* `fwd[j]` is the forward line into element j, equal to x(n−j). `fwd[0]` is the input.
* The fold is a wire: `bwd[32] = fwd[32]` = x(n−32).
* `bwd[j]` is the output of element j's backward register, equal to x(n−64+j).
  Element j pre-adds `fwd[j]` and `bwd[j+1]`.
* Element 0 needs no backward register (`BWD_REG = 0`). The folded line therefore
  holds 63 samples: 32 forward and 31 backward.

Taps 0..11 are all coeff-r. So the backward registers of elements 1..12 feed no
multiplier, and synthesis removes them, leaving 51 of the 63 sample registers. The RTL
keeps the complete line so that any split of the coefficients works.

## Putting the halves together (`fir_rag_improved`)

```
            +--> rag_mult_block --15 products--> rag_pulsation_chain (64 PEs) --y_r--+
 din -------+                                                                        (+)--> dout
            +--> sym_section (32 folded PEs, 16 multipliers) --------------------y_s--+
```

Both halves update on the same clock edge, the one that accepts a sample. Each has
exactly one register between input and output, so y_r and y_s always belong to the
same sample. They are added in the output register.

**Interface**

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, rising edge |
| `rst_n` | in | 1 | asynchronous active-low reset, clears every register (delay lines start at zero) |
| `in_valid` | in | 1 | `din` is a new sample; low freezes the whole filter (a stall) |
| `din` | in | `DATA_W` (16) | signed sample |
| `out_valid` | out | 1 | `dout` holds a new result |
| `dout` | out | `DATA_W+17` (33) | signed y(n), full precision |

**Timing**

* Throughput is one sample per clock.
* A sample taken on edge e produces `out_valid` high with its `dout` right after edge
  e+2, a latency of two clocks.
* Each accepted sample gives exactly one result, and results come out in order.
* A gap in `in_valid` holds every register, including the delay lines. Gaps do not
  change the sequence of results.
* At 250 kHz sampling, any clock of at least 250 kHz keeps up.

**Widths.** The sum of |h(k)| over all 64 taps is 123 366, which is less than 2¹⁷.
So `DATA_W + 17` bits hold every possible result, and the output never wraps or
saturates. Inside the design:

* coeff-r products: `DATA_W + 10` bits;
* pre-adder: `DATA_W + 1` bits;
* coeff-s products: `DATA_W + 15` bits;
* partial sums: `DATA_W + 17` bits throughout.

The source gives no word widths. `DATA_W` is a parameter, with 16 as its default.

## What follows the source and what is this design's own

These follow the source:

* the 64-tap coefficient table;
* the split rule and the two resulting sets;
* the adder graph, apart from the two points in the adder-graph section;
* the two processing-element structures, broadcast-input and folded-symmetric;
* computing the small coefficients with the shared graph and the large ones with
  pre-addition and multipliers.

These are this design's own:

* the sample width and all internal widths;
* the `in_valid` stall interface, the reset, and the output register;
* where the unit delay sits in the transposed PE;
* which side of each register feeds the pre-adder, and the omitted leftmost backward
  register;
* keeping coeff-s taps in the transposed chain as delay-only PEs;
* adding the two halves in one output register;
* the equations for x269 and x428, and the sign of x219.

Comparison figures for this structure were measured on an FPGA against a
fully-parallel pre-adding filter and a full RAG filter: LUTs, flip-flops, DSP blocks,
power and temperature. They depend on word widths and tool mapping that are not known,
so this RTL is not claimed to match them. At 16-bit samples it has about 3000 flip-flop
bits: the 64 × 33-bit transposed chain plus the 51 × 16-bit sample line. The 16
coeff-s multipliers are written as `*` with constant operands. A synthesis tool may
map them to DSP blocks or to logic. The filter has fixed coefficients. A different
coefficient set needs a new adder graph in `rag_mult_block`. The rest of the design
follows the table in `fir_pkg`.

## Verification

Every testbench compares against arithmetic it does itself. The coefficient table is
kept separately in `tb/tb_ref_pkg.sv`, and results are checked against direct
convolution or plain multiplication. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_rag_mult_block` | all 15 products against `x*c`, for ±full scale, ±1, 0 and 3000 random samples |
| `tb_pulsation_pe` | add, subtract and delay-only PEs against a cycle model, random enables, asynchronous reset |
| `tb_sym_pe` | both delay registers, pre-add and multiply, partial sum, delay-only variant |
| `tb_rag_pulsation_chain` | chain output every cycle against the coeff-r convolution: impulse, full-scale, random data with stalls |
| `tb_sym_section` | the same against the coeff-s convolution |
| `tb_fir_rag_improved` | whole filter at default parameters; see below |
| `tb_lowpass_workload` | whole filter as a low-pass filter: sine tones at 1, 2 and 5 kHz must keep the DC gain (94 922) within 0.2 dB; tones at 25, 40, 50 and 100 kHz must be ≥ 40 dB down. Every output is also checked exactly |

`tb_fir_rag_improved` checks every result exactly. It also checks that `out_valid`
follows each accepted sample by exactly two edges. Its phases are:

* an impulse (the output must reproduce the 64 coefficients in order);
* sign-matched full-scale inputs in both polarities (results beyond ±2³¹, so a
  narrower output would wrap);
* about 3000 random samples with random stalls;
* a reset in the middle of the stream.

It counts how often each of these happens and fails if any never does.

In the stop band the measured attenuation is 50 to 65 dB. The response is already
about 6 dB down at 10 kHz and more than 40 dB down at 15 kHz.

To run a testbench with Verilator, for example the end-to-end one:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/fir_pkg.sv tb/tb_ref_pkg.sv tb/tb_fir_rag_improved.sv \
    --top-module tb_fir_rag_improved
./obj_dir/Vtb_fir_rag_improved
```

Verilator finds the other modules through `-Irtl`/`-Itb`. Each takes well under a
second. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/fir_pkg.sv rtl/<module>.sv`. The only warnings
are package constants that a given module does not use.

## Files

| file | contents |
|---|---|
| `rtl/fir_pkg.sv` | coefficient table, coeff-r list, width constants, split rule and tap-mapping functions |
| `rtl/rag_mult_block.sv` | shared shift-and-add graph for the 15 small constants |
| `rtl/pulsation_pe.sv` | transposed-form PE (add / subtract / delay) |
| `rtl/rag_pulsation_chain.sv` | 64-PE chain for the coeff-r taps |
| `rtl/sym_pe.sv` | folded symmetric PE (two delays, pre-add, constant multiply, accumulate) |
| `rtl/sym_section.sv` | 32-PE folded line for the coeff-s taps |
| `rtl/fir_rag_improved.sv` | top level |
| `tb/tb_ref_pkg.sv` | independent reference coefficients for the testbenches |
| `tb/tb_*.sv` | the testbenches listed above |
