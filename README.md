# Feedforward nonlinear equalizers for wireline receivers

A receiver for a lossy serial link usually removes the first postcursor
intersymbol interference (ISI) with a decision-feedback equalizer (DFE). The
DFE's weak point is its loop: the previous decision has to be made, fed back
and subtracted inside one unit interval. A *feedforward nonlinear equalizer*
(FFNE) drops the loop. It looks at a short window of received samples and
decides the current bit with a few comparators and gates. There is no
feedback path, so it can be pipelined freely. The cost is that it is a
sequence detector over a finite window, so it loses some noise margin once
the ISI is large.

This RTL implements the FFNE family as digital logic that acts on ADC
samples:

| module | what it equalizes | window | adaptation |
|---|---|---|---|
| `win2_ffne` + `win2_adapt` = `win2_nrz_rx` | NRZ, postcursor h1 | 2 samples | h0, h1 and summer gain Gm2 |
| `pam4_win2_ffne` | PAM-4, postcursor h1 | 2 samples | none (taps are inputs) |
| `pd_ffne` (`pd_ffne_core`, `pd_pattern_filter`, `pd_adapt`) | NRZ, precursor h-1 and postcursor h1 | 2 samples in each of two detectors, plus a 5-symbol pattern filter | h-1, h0 and h1 |
| `win3_ffne` | NRZ, postcursor h1 | 3 samples | none (taps are inputs) |

`ffne_top` places all of them on one sample port. Every block reads one
signed sample per clock, `vin`, and puts out its decisions a fixed number of
clocks later.

## Signal model and units

The received sample is the pulse response weighted by the bits `a[j]` (±1):

    V[k] = h-1*a[k+1] + h0*a[k] + h1*a[k-1] + noise

All levels are held in ADC LSBs, in the same units as `vin`:

- Samples are `SAMPLE_W` = 8 bits, two's complement.
- Taps are `TAP_W` = 10 bits.
- Gains Gm1 and Gm2 are unsigned with 8 fraction bits, so 256 = 1.0.
- The ratio h1/h0 is signed with 8 fraction bits.

All of these widths are in `ffne_pkg`. They are this design's own choice; the
algorithms do not depend on them. A comparator tests "greater than zero", so
a sum of exactly zero reads as 0. Reset is asynchronous and active low.

## Window-2 NRZ FFNE

With one postcursor, the two samples V[k-1] and V[k] depend on three bits.
The nearest of the 8 possible noiseless points decides a[k].

- Outside the strip |V[k]| < h1, the sign of V[k] is already unambiguous.
- Inside the strip, the only serious confusion is between the alternating
  sequences ...1,0 and ...0,1. The line that separates those two is a
  weighted difference of the samples.

The detector is therefore three comparators and two NAND gates:

    c_hi  = V[k] - h1 > 0
    c_lo  = V[k] + h1 > 0
    c_dif = Gm1*V[k] - Gm2*V[k-1] > 0
    D[k]  = c_hi | (c_lo & c_dif)

The tie-break line is the bisector between the two closest alternating
points, (h0-h1, -(h0-h1)) and its mirror image, so ideally the two summer
gains are equal and the summer computes V[k] - V[k-1]. In an analog summer
the two input gains never match exactly. Gm1 is therefore an input (the "as
built" gain), and the adaptation trims Gm2 until it equals Gm1.

A sign question: one printed form of the centre rule picks a 1 when
V[k-1] >= V[k]. The derivation and the circuit diagram both give
V[k] > V[k-1]. The RTL uses the latter. `tb_win2_ffne` confirms it on every
sample against a brute-force search over the 8 sequences.

### Adaptation (`win2_adapt`)

One error slicer compares the sample with a reference. The reference
alternates every clock between two data levels:

- dLev11, the noiseless level for bits 11 (h0+h1);
- dLev01, the level for bits 01 (h0-h1).

Each level moves by sign-sign LMS, but only on samples whose decided bits
match its pattern. From the two levels:

    h0 = (dLev11 + dLev01)/2
    h1 = (dLev11 - dLev01)/2

On a run of three equal bits the difference summer should read zero. The
sign of its output C[k] therefore steers Gm2, one step per qualifying
sample. The step sizes are this design's choice: 1/16 LSB for levels and
4/256 for the gain. So are the initial values h0 = 32 and h1 = 0.

`win2_nrz_rx` closes the loop: the adapted h1 drives the FFNE comparators
and the adapted Gm2 drives its summer.

## PAM-4 window-2 FFNE

For PAM-4 with h1 <= h0/3, the decision map splits into three copies of the
NRZ detector. They sit around the three eye centres -VTH, 0 and +VTH, with
VTH = 2/3·h0. A single tie-break value is shared:

    y = V[k] - (h1/h0)*V[k-1]

Each copy produces one thermometer bit. The thermometer code sel2..sel0
becomes Gray code:

    MSB = sel1
    LSB = sel2 ^ sel0

With that code the levels -1, -1/3, +1/3, +1 map to 00, 01, 11, 10. No
adaptation rule is given for PAM-4, so h1, VTH and h1/h0 are ports.

## PD-FFNE: precursor and postcursor together

A single Win-2 detector can handle either h1 or h-1. The PD-FFNE runs both
and settles their disagreements with pattern logic.

### Core (`pd_ffne_core`)

The core works on the delayed sample Vd = V[k-1] and its successor V[k].
Both detectors share one difference comparator, c_dif = Vd - V[k] > 0.

- The precursor detector looks forward: Dpre = (Vd > h-1) | (Vd > -h-1 & c_dif).
- The postcursor detector looks back: Dpost = (V > h1) | (V > -h1 & ~c_dif), then registered.

A third group of comparators classifies each sample:

- Dcomp is the plain sign.
- Dxp and Dxn are the signs of V + hx and V - hx. When they disagree, the
  sample is small (|V| < hx) and its decision is suspect.

The core's outputs are registered so that they all refer to the same symbol.

Two readings had to be settled here:

- The text says hx is used to form Dcomp, but the diagram draws Dcomp as a
  plain sign comparator. The RTL follows the diagram.
- The text describes the suspect case as "Dxp = -1 and Dxn = 1". With the
  comparator polarities as drawn, that combination cannot occur. The RTL
  reads it as "Dxp and Dxn disagree".

### Pattern filter (`pd_pattern_filter`)

The filter keeps a 5-symbol window. Call a symbol a conflict when Dpre and
Dpost disagree on it. Four patterns cover the error events that either
detector alone gets wrong:

1. **Conflict with a steady branch.** At the conflict, one branch shows three
   equal decisions in a row. That branch is distrusted, so the other one is
   taken.
2. **Conflict, agreement, conflict.** Dpost is taken at the first symbol and
   Dpre at the third. The agreed middle decision is inverted.
3. **Isolated conflict on a small sample with a small neighbour.** The
   branch that agrees with Dcomp is taken. The neighbour on the other side
   of that branch's window is flipped if it is also small.
4. **Three agreed symbols with a steady Dpre and a small centre sample.** The
   centre decision is flipped.

This design makes three choices of its own here:

- Where the patterns overlap, the lower-numbered pattern wins.
- A conflict that no pattern covers takes Dpost.
- The output is computed directly from the raw window, so the filter stays
  feedforward.

`fire` reports which patterns were centred on each output bit.

### Adaptation (`pd_adapt`)

The error slicer reference rotates through four data levels. Each is the
noiseless Vd for a pattern of three decided bits {D[k-2], D[k-1], D[k]}:

| level | value |
|---|---|
| 111 | h-1 + h0 + h1 |
| 110 | -h-1 + h0 + h1 |
| 011 | h-1 + h0 - h1 |
| 010 | -h-1 + h0 - h1 |

The error is delayed by EDLY = 5 clocks so it meets the filtered decision of
its own symbol. Each level is then updated by sign-sign LMS, and:

    h0  = (L111 + L010 + L110 + L011)/4
    h1  = (L111 - L010 + L110 - L011)/4
    h-1 = (L111 - L010 - L110 + L011)/4

The printed form of these formulas exchanges the h1 and h-1 combinations.
Under the signal model above, the printed form makes the precursor estimate
converge to the postcursor, and vice versa. The RTL uses the signs that
follow from the model. The fault test for this block runs the printed form
and shows that it fails.

`pd_ffne` wires core, filter and adaptation together. The adapted h-1 and h1
feed back into the core thresholds. hx is an input.

## Window-3 NRZ FFNE

Adding V[k-2] to the window turns the 2-D decision map into a 3-D nearest-
point partition over 16 sequences. The hardware keeps the two h1 comparators
of the window-2 detector. Inside the strip, the tie-break is one of five
slicers, using r = h1/h0, A = (1-r)V[k] - V[k-1] and B = V[k] - V[k-1]:

    s1 = A + h1 > 0
    s2 = A - h1 > 0
    s3 = (1-r)B + V[k-2] - h1 > 0
    s4 = (1-r)B + V[k-2] + h1 > 0
    s5 = B + V[k-2] > 0

A one-hot region select chooses among them. It depends only on V[k-1] and
V[k-2], so the RTL computes it one clock early and registers it. The select
comes from three comparator groups and a small gate network:

- V[k-2] against ±h0;
- (1-r)V[k-2] + r·V[k-1] against ±h1;
- V[k-2] + r·V[k-1] against -2h1, 0 and +2h1.

The circuit diagram labels the middle group "±h1" but draws h0 next to its
summers. The labels are used here. With them the circuit matches the brute-
force nearest-point decision on every untied sample of the testbench; with
h0 it does not. All sums are scaled by 2^8, so with exact ratios the
decision has no rounding. The ports take h0, h1 and h1/h0.

## Timing summary

| block | decision latency |
|---|---|
| `win2_ffne`, `win2_nrz_rx`, `pam4_win2_ffne`, `win3_ffne` | 1 clock |
| `pd_ffne_core` | 1 clock |
| `pd_pattern_filter` | 4 clocks after the core |
| `pd_ffne` | 5 clocks |

Everything processes one sample per clock and never stalls. A real
multi-GS/s receiver would run several copies in parallel, one per phase.
That interleaving is not part of this RTL.

## Departures and limits

- Comparators, summers and multipliers are digital operations on ADC codes,
  not analog circuits. The widths and fixed-point formats are this design's
  own choices.
- The analog front end (CTLE, sampler or ADC) is outside the design.
- The PAM-4 FFNE and the Win-3 FFNE have no tap adaptation; their taps are
  inputs. For PAM-4 no adaptation rule is specified beyond "the NRZ
  procedure applies".
- The adaptation schedules (which reference level is tested on which clock),
  step sizes and initial values are this design's choices.
- The pattern filter's priority order and its default on uncovered
  conflicts are this design's choices.
- The FFE+DFE baseline that the PD-FFNE is compared with is not built.
- The long-channel comparison (a 25.6 dB-loss channel with transmit FFE) is
  not reproduced. Only its plotted pulse response is available, so the tests
  use synthetic pulse responses of similar shape instead, such as
  h-1 : h0 : h1 = 0.3 : 1 : 0.3.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_win2_ffne`: random NRZ, noise-free and noisy, with h1 = 0.3 and 0.4·h0
  and with a gain mismatch. Every decision is compared with the region rule.
  An exhaustive 8-sequence maximum-likelihood search is reported alongside
  and agrees on every sample.
- `tb_win2_adapt`, `tb_win2_nrz_rx`: h0, h1 and Gm2 converge with a 10 %
  Gm1 error, and the closed loop decodes without error. The closed loop does
  so again with extra ISI the model leaves out (a precursor and a second
  postcursor).
- `tb_pam4_win2_ffne`: random PAM-4 at h1 = 0.25·h0, the top of its range,
  with and without noise. Checked against the exact decision regions, the
  Gray code and the latency.
- `tb_pd_ffne_core`, `tb_pd_pattern_filter`: each detector output against
  its formula; the filter against worked cases of each pattern and a
  reference model on random streams.
- `tb_pd_adapt`, `tb_pd_ffne`: convergence from [0, 32, 0] to [6, 40, 12]
  LSB (adaptation alone) and to [12, 40, 12] LSB (whole receiver); no estimate steps by more than 1 LSB per clock; error-free
  decoding with mild noise. Under heavy noise the PD-FFNE makes about a third
  of the errors of a postcursor-only detector.
- `tb_win3_ffne`: every decision against an exhaustive 16-sequence nearest-
  point search for h1 = 0.125..0.625·h0. At h1 = 0.5·h0 it makes about a
  tenth of the window-2 errors.
- `tb_ffne_top`: the whole design at default sizes. It runs NRZ adaptation,
  PAM-4, PD-FFNE adaptation and noisy decoding, and Win-3. It counts each
  mechanism and fails if any never occurs: strip decisions, h1 and Gm2
  updates, each PAM-4 symbol, PD tap updates, each correction pattern and
  each Win-3 region.

To simulate a testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
      --top-module tb_ffne_top rtl/ffne_pkg.sv tb/tb_ffne_top.sv
    ./obj_dir/Vtb_ffne_top

`-y rtl` lets Verilator find the modules by name. To run another testbench,
change the top module and the testbench file. The package must come first
on the command line.
