# Five-modular-redundant FIR filter for ECG denoising

A low-pass FIR filter cleans a noisy electrocardiogram (ECG) sample stream. To keep
transient hardware faults, such as a flipped bit in one filter, from reaching the output, the
filter is built five times. All five copies see the same input, and a voter forms the output from
their five results. As long as at most two copies are wrong at a given moment, the voted output
is the fault-free one. This is five-modular redundancy (5MR).

The design follows a paper that compares five ways of building the 5MR voter. Its filter is built
from Vedic multipliers and carry-save adders. This RTL contains all five voters side by side, and a
run-time input selects which one drives the output. The filter arithmetic is built from the same
parts the paper names: 2x2 to 16x16 Vedic multipliers, ripple-carry adders and carry-save adders.

```
             +-----------+  rep_y[0]
  xn[15:0] --+-> FIR #0  +----------+     +--------------------+
             +-> FIR #1  +----------+---->| voter_conventional |--+
             +-> FIR #2  +----------+---->| voter_xor_mux      |--+
             +-> FIR #3  +----------+---->| voter_xnor_mux     |--+--[cfg]--> yn[15:0]
             +-> FIR #4  +----------+---->| voter_cascaded_tmr |--+
                                          | voter_mux4 -> reg  |--+
                                          +--------------------+
```

## The voters

Each voter works bit by bit on the five 16-bit module outputs `a..e`. For every bit, all five
voters compute the same function: the output is 1 when at least three of the five inputs are 1
(the five-input majority). Only their circuits differ, and the circuits are what the paper
compares for area. A voter that computes the exact majority outvotes any two faulty modules,
however their bits are corrupted. Three modules corrupted the same way win the vote. The
testbenches check both cases.

| `cfg` | module | circuit | latency |
|---|---|---|---|
| 0 `VOTE_CONVENTIONAL` | `voter_conventional` | OR of the ten 3-input AND terms (abc+abd+...+cde) | 1 clock |
| 1 `VOTE_XOR_MUX` | `voter_xor_mux` | four XOR-MUX three-input voters in a cascade | 1 clock |
| 2 `VOTE_XNOR_MUX` | `voter_xnor_mux` | four XNOR-MUX three-input voters in a cascade | 1 clock |
| 3 `VOTE_CASCADED` | `voter_cascaded_tmr` | four AND-OR three-input voters in a cascade | 1 clock |
| 4 `VOTE_MUX4` | `voter_mux4` | AND3 / MAJ3 / OR3 of a,b,c into a 4:1 mux selected by d,e, then a register | 2 clocks |

**Sum of products.** This is the textbook form, one product term for every set of three modules.
The paper's drawing of it lists `bde` twice and leaves out `bce`. The RTL uses the ten distinct
terms.

**Three-input voters with XOR, XNOR and AND-OR.** A triple-modular-redundancy (TMR) voter takes
three inputs. An XOR-MUX TMR voter compares `a` and `b` with an XOR. Where they agree, the mux
passes `a`, which is then the majority. Where they differ, it passes the third input `c`, which
breaks the tie: `y = (a ^ b) ? c : a`. The XNOR-MUX voter is the same circuit with the select
inverted: `y = ~(a ^ b) ? a : c`. The AND-OR voter is `ab | ac | bc`. All three compute the
three-input majority exactly.

**How the five inputs are reduced with three-input voters.** The voted word must not depend on
which two modules fail, and no cascade of three-input majorities with fewer than four voters
achieves that. An exhaustive search over four-voter cascades gives this one, which all three TMR
configurations use:

```
t1 = V(a, b, c)     t2 = V(a, b, d)        first plane
t3 = V(c, d, t1)                           second plane
y  = V(e, t2, t3)                          third plane
```

To see why it works, look at one bit. If `a` and `b` agree, both `t1` and `t2` equal them. If `c`
or `d` also agrees, `t3` agrees too and `y` follows. If neither does, `c` and `d` both hold the
other value, `t3` takes that value, and `e` decides, which is correct. If `a` and `b` disagree,
then `t1 = c`, `t2 = d` and `t3 = V(c, d, c) = c`, so `y = V(e, d, c)`. That is the majority of
all five, because `a` and `b` cancel.

The paper's figures for these configurations show the gate types and an output mux, but their
wiring cannot be read gate by gate. The figure for the XOR and XNOR versions
also suggests a final mux whose data inputs are only modules 1 and 2. Such a mux cannot outvote
two modules that fail the same way, so this design does not build that form.

**The 4:1-mux voter** is built exactly as drawn in the paper, and it is the cleverest of the five.
How many of `d, e` are 1 says how many more 1s modules `a, b, c` must supply:

```
{d,e} = 00  -> need 3 of a,b,c  -> AND3(a,b,c)
{d,e} = 01  -> need 2           -> MAJ3(a,b,c)
{d,e} = 10  -> need 2           -> MAJ3(a,b,c)
{d,e} = 11  -> need 1           -> OR3(a,b,c)
```

The paper's netlist for this configuration has a 16-bit register after the voter. Its resource
table gives 148 flip-flops for it against 132 for the other four. The RTL has that register
(`mux4_q`), so in this configuration `yn` lags by one more clock.

The paper builds five separate designs, one per voter. Here they share the five filters and are
selected by `cfg`. The unselected voters are idle logic. To study one voter's cost, synthesise the
voter module alone.

## The filter

`fir_filter` is a direct-form FIR: `y[n] = sum_k c[k] * x[n-k]`. Tap 0 takes `xn` straight from
the input. A chain of `TAPS-1` registers supplies the older samples.

* **Multiplication.** Each tap has a 16x16 Vedic multiplier (`vedic_mult_16x16`). The multiplier
  is unsigned, so the tap takes the magnitudes of the sample and the coefficient. It negates the
  32-bit product when their signs differ. Because a magnitude is taken as 16 unsigned bits,
  -32768 is handled too.
* **Summation.** A chain of `carry_save_adder`s adds the products, two products per adder on top
  of the running sum. The sum is 36 bits of two's complement, enough for eight full-scale
  products.
* **Scaling.** The coefficients are Q15 (stored as the value times 2^15). The sum is shifted right
  arithmetically by 15, saturated to 16 bits and registered as `yn`.
* **Coefficients.** The paper gives none. The default is an 8-tap Hamming-windowed low-pass with
  a cutoff at 0.1 of the sample rate, which is 36 Hz at the usual 360 Hz ECG rate. The values
  are `c[k] = round(32768 * h[k] / sum h)`, with
  `h[k] = sin(2*pi*0.1*m)/(pi*m) * (0.54 - 0.46*cos(2*pi*k/7))` and `m = k - 3.5`. This gives
  `{287, 1571, 5375, 9151, 9151, 5375, 1571, 287}`, which sums to exactly 32768, so the DC gain
  is 1. They live in `ft_pkg::FIR_COEFS`. To change the filter, override the `TAPS` and `COEFS`
  parameters of `fir_5mr` or `fir_filter`.

### Vedic multiplier

Vedic multiplication ("vertically and crosswise") splits each operand into halves `H` and `L` and
forms four half-size products. `aH*bH` and `aL*bL` are the vertical ones, `aH*bL` and `aL*bH` the
crosswise ones. Three ripple-carry adders then combine them (`vedic_combine`, W = full width):

```
adder 1: m2 + m1                          -> r1, carry ca1     (m2 = aH*bL, m1 = aL*bH)
adder 2: r1 + (m0 >> W/2)                 -> r2, carry ca2     (m0 = aL*bL)
adder 3: m3 + {ca1|ca2, r2[W-1:W/2]}      -> r3                (m3 = aH*bH)
product = {r3, r2[W/2-1:0], m0[W/2-1:0]}
```

The paper draws this at 4x4, from 2x2 leaves. Here it repeats at 8x8 and 16x16. One point departs
from the drawing. The drawing leaves the carry of the second adder (`ca2`) unconnected and feeds
only `ca1` into the third adder. `ca2` can be 1, for example at 15 x 14 in 4 bits, and dropping it
gives 146 instead of 210. `ca1` and `ca2` have the same weight and can never both be 1, so the RTL
ORs them into the bit the drawing gives `ca1`. The final carry of adder 3 is always 0 and is left
unused. The paper's text describes the 4x4 multiplier as "9 full adders and a special 4-bit
adder", while its figure shows three 4-bit ripple-carry adders. The RTL follows the figure.

### Carry-save adder

`carry_save_adder` adds three W-bit words with a row of full adders. The row produces a sum word
`S` and a carry word `K` without any carry propagation. `S[0]` is bit 0 of the result. A W-bit
ripple-carry adder adds `K` to `S[W-1:1]`, with a 0 filled in at the top, to give the rest. The
result has W+2 bits and never overflows. In the filter, the low 36 bits are used as a
two's-complement sum.

## Interface and timing of `fir_5mr`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | one sample per rising edge |
| `rst` | in | 1 | synchronous, active high: clears every delay line, every filter output and the 4:1-mux output register |
| `xn` | in | 16 | signed input sample x(n), sampled at the rising edge |
| `cfg` | in | 3 | `ft_pkg::voter_cfg_e`, selects the voter (may change at any cycle) |
| `yn` | out | 16 | signed voted output |

A sample applied before edge k shows up in `yn` right after edge k in configurations 0-3, and
right after edge k+1 in configuration 4. The voters are combinational, so the longest path runs
from a filter's delay line through a 16x16 Vedic multiplier and the carry-save adder chain. No
pipelining is added; the paper gives no clock rate.

## Departures from the paper and choices of this design

* The filter length, the coefficients, the Q15 scaling, the saturation and the sign-magnitude
  wrapping of the Vedic multiplier are this design's own choices. The paper gives only the
  structure, a 16-bit datapath and the kinds of multiplier and adder.
* The three TMR-based voters use the cascade shown above, not the wiring of the paper's figures,
  which cannot be read in full.
* `ca2` in the Vedic multiplier is connected (see above).
* The paper's text says the five results are combined by taking their median. Its figures, and
  this RTL, use a bitwise majority. The two agree whenever three or more modules agree.
* All five voters are in one design behind `cfg`.
* The `rst` pin and its synchronous style come from the paper's synthesised netlists. The reset
  clears state but does not gate the voters.
* The paper's synthesised netlists show the five identical filters merged into a single instance:
  given identical logic on the same input, a synthesis tool removes the redundancy. The filter
  instances in `fir_5mr` carry `keep_hierarchy` and `dont_touch` attributes against this. With
  any tool, check after synthesis that five filters are present, or the design is not fault
  tolerant at all.
* The 16-bit memory that played the recorded ECG into `xn` in the paper's simulations is not part
  of this RTL. The end-to-end testbench generates its own ECG-like signal.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if it hangs.

| testbench | what it checks |
|---|---|
| `tb_full_adder`, `tb_ripple_carry_adder`, `tb_vedic_mult_2x2`, `tb_vedic_mult_4x4` | exhaustively, against integer arithmetic |
| `tb_vedic_mult_8x8`, `tb_vedic_mult_16x16`, `tb_carry_save_adder` | corner operands and 20 000 random ones |
| `tb_voter_*` | all 32 bit patterns in every lane; 5000 random words with one and two corrupted modules (must vote them out) and three equally corrupted modules (must show through) |
| `tb_fir_filter` | impulse, full-scale steps, 3000 random samples and a mid-stream reset, against a behavioural convolution. A second instance with gain 4 checks saturation. The one-cycle latency is checked every cycle. |
| `tb_fir_5mr` | the whole design at its default size, on a synthetic noisy ECG (see below) |

`tb_fir_5mr` builds its input from heartbeats every 300 samples: a P wave, a sharp negative QRS
spike and a T wave. It adds 50 Hz mains hum at a 360 Hz sample rate and random wide-band noise.
It runs each voter configuration for 1200 samples. During each one it repeatedly forces one, two
or three module outputs to wrong values. It compares `yn` with a behavioural model every cycle,
with the configuration's latency. With one or two faulty modules `yn` must be unchanged; with
three equal faults the corrupted value must appear. It also checks that the output's
sample-to-sample energy is under half that of the input, which shows the noise is filtered. It
then counts each configuration, each fault multiplicity and the reset, and fails if any of them
never happened.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/ft_pkg.sv tb/tb_fir_5mr.sv \
          --top-module tb_fir_5mr -Mdir obj_tb_fir_5mr
./obj_tb_fir_5mr/Vtb_fir_5mr
```

Replace the testbench name to run the others. `-Irtl` lets Verilator find each module in
`rtl/<module>.sv`.

## Files

`rtl/ft_pkg.sv` holds the shared constants: widths, filter length, coefficients and the voter
enum. The arithmetic is in `full_adder`, `ripple_carry_adder`, `carry_save_adder`,
`vedic_mult_2x2`, `vedic_combine`, `vedic_mult_4x4`, `vedic_mult_8x8` and `vedic_mult_16x16`.
The filter is `fir_filter`. The three-input voters are `tmr_and_or`, `tmr_xor_mux` and
`tmr_xnor_mux`. The five-input voters are `voter_*`. The top is `fir_5mr`.
