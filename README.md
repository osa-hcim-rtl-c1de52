# A saliency-aware hybrid digital/analog SRAM compute-in-memory macro

Not every input to a neural-network layer matters equally. Pixels on the object
carry the classification, and background pixels barely change it. This macro
uses that fact inside an SRAM compute-in-memory (CIM) array. Each multi-bit
multiply-accumulate (MAC) is split into 1-bit MACs. A few of the most
significant ones are computed first and exactly, and their result is a cheap
estimate of how important ("salient") the whole MAC is. That estimate sets, per
input vector, where the split falls between

* **exact digital computation**: a bit-serial adder tree,
* **cheap analog computation**: charge sharing with a 3-bit ADC,
* **no computation at all**: the least significant partial products.

The digital and analog parts then run at the same time on the same SRAM columns.
The array cell reads one weight bit through one port for the digital path and
another weight bit through a second port for the analog path.

This RTL models a 64 x 144-bit macro with 8 output channels, the peripherals
that sequence it, and a behavioural model of its analog readout. It follows the
published description of the design. Where that description is silent, this
document says what was chosen.

## 1. Splitting a MAC by output order

The operands are `a`-bit activations `A` and `w`-bit weights `W`, with
`a, w ∈ {4, 8}`. Their dot product over the 144 inputs is

    MAC(A, W) = Σ_i Σ_j 2^(i+j) · MAC1(W[i], A[j])

Here `MAC1(W[i], A[j])` is the 1-bit MAC of weight bit `i` and activation bit
`j` over all 144 inputs. It is a number from 0 to 144. Its *output order* is
`k = i + j`, which runs from 0 to `w+a-2` (14 for 8b x 8b).

One operation has two phases:

1. **Saliency evaluation.** Every 1-bit MAC in the `s` highest orders is computed
   digitally: `k = w+a-2` down to `w+a-1-s`. For 8b x 8b with `s = 3` these are
   orders 14, 13 and 12, which hold 1 + 2 + 3 = 6 one-bit MACs. Their results give
   a saliency value `S`, and `S` selects a boundary `B` (written B_D/A).
2. **Computing.** Every remaining 1-bit MAC is allocated by its order:

   | order                    | path    | how                                        |
   |--------------------------|---------|--------------------------------------------|
   | `k >= B`                 | digital | one 1-bit MAC per cycle, exact             |
   | `B-4 <= k < B`           | analog  | one weight bit per operation, 1..4 activation bits in parallel, 3-bit ADC |
   | `k < B-4`                | dropped | not computed                               |

   The 1-bit MACs of the saliency phase are exact, so they are also added into
   the result.

Example: 8b x 8b, `s = 3`, `B = 8`. The digital path computes orders 11..8: 4 + 5 + 6 + 7 =
22 one-bit MACs. The analog path takes orders 7..4. It groups them by weight bit,
which gives one analog operation per weight bit `i`. Each uses the activation
field `A[max(0,4-i) .. 7-i]`:

| weight bit i | 7 | 6 | 5 | 4 | 3 | 2 | 1 | 0 |
|---|---|---|---|---|---|---|---|---|
| activation bits | A[0] | A[1:0] | A[2:0] | A[3:0] | A[4:1] | A[5:2] | A[6:3] | A[7:4] |

Orders 3..0 are dropped. A smaller `B` makes more of the MAC exact and costs more
cycles. The candidate values of `B` are a configuration input. For 8b x 8b the
intended set is 10, 9, 8, 7, 6, 5.

Both paths visit weight bits from the most significant down. Within one weight
bit they visit activation bits from the most significant down. The word lines
therefore change only once per weight bit.

## 2. Array organisation

    act_in ─► activation register ─┬─► DIN (bit j, inverted) ───► GBLB[0..143] ─┐
                                   └─► AIN + DAC (A[lo+:n]) ────► GBL[0..143]  ─┤  shared by all HMUs
                                                                                ▼
      DWL/AWL driver ─► HMU0 … HMU7:  144 × HCIMA ─► DOUT ─► adder tree ─► DMAC ─► N/Q ─► RS ─► OSE ─► B_D/A
                                                  └► AOUT ─► charge share + SAR ADC ─► AMAC
                                      DMAC, AMAC ─► accumulator (shift-and-add) ─► result[0..7]
      controller: sequences the modes and both paths;  R/W IO: row reads and writes

* **HMU (hybrid MAC unit)**, `hmu`: one output channel. It has 144 HCIMAs (one per
  input), a digital adder tree, a normalize/quantize unit and a 3-bit ADC.
* **HCIMA (hybrid CIM array)**, `hcima`: eight 6T bits of one column holding one
  8-bit weight. In 4-bit mode the column holds two 4-bit weights: rows 0-3 or
  rows 4-7, chosen by `cfg.w_half`. The cell's two access transistors sit on two
  local bit lines:
  * the digital word line `DWL[r]` puts the inverted bit on `LBLB`,
  * the analog word line `AWL[r]` puts the true bit on `LBL`.

  Different rows can be read on the two lines in the same cycle. The digital
  multiplier is `DOUT = NOR(LBLB, GBLB) = W[r] & A[j]`, because `GBLB` carries the
  inverted activation bit. The analog multiplier passes the analog input `GBL` to
  `AOUT` when `W[r] = 1` and pulls it to 0 otherwise. Both local lines are
  precharged high, and a selected cell storing the opposite value discharges its
  line. The model precharges implicitly at the start of every cycle.
* **Macro rows.** Row `r` of the 64 belongs to HMU `r/8` and is bit `r%8` of that
  HMU's weights. In computing mode the word-line driver raises the same bit in all
  eight HMUs. In RW mode (`RWen` high) it raises both word lines of a single row.
  That row is then read or written like a normal SRAM row through `rw_io`.

## 3. Saliency evaluator

Each saliency-phase DMAC (0..144) is reduced to 3 bits per HMU by `nq`:
`RS = min(7, DMAC >> nq_shift)`. The shift is a configuration field. The evaluator
`ose` then adds the eight RS values, shifts the sum left by `k - (w+a-1-s)`, and
accumulates it into `S` over the saliency cycles. So a 1-bit MAC one order higher
counts twice as much.

The boundary is chosen by counting how many of the five ascending thresholds
`T0..T4` have been reached:

    S < T0 → B0,   T0 ≤ S < T1 → B1,   …,   S ≥ T4 → B5

The thresholds are found offline by a training loop. It starts with all `Ti`
unset, trains, and moves `Ti` down when the loss is too high and up when it is
needlessly low, until the loss meets the user's constraint `Li`. It then moves on
to the next `i`. The loop is software. In the RTL its output is just the `thr`
input.

## 4. Analog numbers: DAC, charge sharing, ADC and rebuilding the sum

This section is the main place where the RTL adds detail the source leaves open.
It also decides how the analog result is weighted.

* **DAC** (`ain_dac`): a switch matrix connects each column's `GBL` to one of the
  reference taps. The RTL carries the tap index, which is the n-bit field
  `A[lo +: n]`, on the 4-bit `gbl` bus. Tap `v` stands for `v/2^n` of the DAC
  reference.
* **Charge sharing**: the 144 `AOUT` nodes are shorted together. The line settles
  at `Vref · X / (144 · 2^n)`, where `X = Σ W[i]·A[lo +: n]` over the columns.
* **ADC** (`sar_adc`, behavioural): the full scale is chosen as 8/9 of the DAC
  reference. One LSB is then exactly `2^(n+4)` units of `X`, and the 3-bit code
  is `AMAC = min(7, floor(9X / (144 · 2^n))) = min(7, X >> (n+4))`. The
  successive approximation resolves one bit per cycle, MSB first. The result is
  ready 3 cycles after the start, and the next conversion may start in that
  cycle. The model is exact integer arithmetic: it has no noise, offset or
  mismatch.
* **Rebuilding**: the accumulator adds `AMAC << (i + lo + n + 4)`. This is `X`
  rounded down to the ADC step, times `2^(i+lo)`. The shift is latched when the
  conversion starts, because the next analog operation may already be issued when
  the code arrives.

The analog part of a result is therefore only approximate, by design. It
truncates `X` to `2^(n+4)` steps and clips at 7 steps. The digital part is exact.
The end-to-end testbench computes the expected result with these formulas. It
does not use the ideal dot product.

## 5. Timing

All blocks run on one clock. In the saliency phase the digital path issues one
1-bit MAC per cycle. Each DMAC leaves the registered adder tree one cycle later,
together with a tag (order and mode) that the controller delays to match. One
extra cycle lets `S` settle, and then `B` is latched. In computing mode the
digital path again issues one 1-bit MAC per cycle. At the same time the analog
path starts one conversion whenever the ADC is free, which is every 3 cycles.

With `ns` saliency 1-bit MACs, `nd` digital and `na` analog operations, the time
from the cycle `start` is high to the cycle `done` is high is

    L = ns + 5 + max(nd, 3·na)   cycles

For 8b x 8b, `s = 3` (`ns = 6`):

| B | 10 | 9 | 8 | 7 | 6 | 5 |
|---|---|---|---|---|---|---|
| nd | 9 | 15 | 22 | 30 | 37 | 43 |
| na | 8 | 8 | 8 | 7 | 6 | 5 |
| L (cycles) | 35 | 35 | 35 | 41 | 48 | 54 |

At large `B` the analog path limits the speed. The published design proposes
clocking the digital path faster than the ADC to balance the two paths. The
top's parameter `ADC_DIV` models this. `clk` is then the digital clock, and each
ADC bit decision takes `ADC_DIV` cycles of it, so a conversion takes
`3·ADC_DIV` cycles and

    L = ns + 5 + max(nd, 3·ADC_DIV·na)   digital cycles

With `ADC_DIV = 2` the same table reads 59, 59, 59, 53, 48, 54 cycles. These are
cycles of a clock twice as fast. With the ADC clock held fixed, the latencies
are therefore 29.5, 29.5, 29.5, 26.5, 24 and 27 ADC clock periods, instead of
35, 35, 35, 41, 48 and 54.
The default is `ADC_DIV = 1`: one rate for both paths.

## 6. Interface of `osa_hcim`

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of control state (the SRAM bits are not reset) |
| `act_load`, `act_in[144]` | in | copy 144 8-bit activations into the activation register (only while idle) |
| `start`, `cfg` | in | start an operation; `cfg` = {`w_bits`, `a_bits` (4 or 8), `w_half`, `s_orders` (1..3), `nq_shift`} |
| `bcand[6]`, `thr[5]` | in | boundary candidates B0..B5 and ascending thresholds T0..T4, sampled during the operation |
| `busy`, `done` | out | operation in progress; one-cycle end pulse |
| `result[8]` | out | 26-bit MAC of each HMU, valid from `done` until the next `start` |
| `bda`, `saliency` | out | the boundary used and `S` |
| `rw_req`, `rw_we`, `rw_row`, `rw_wdata` | in | one-row SRAM access, accepted only while idle (`start` has priority) |
| `rw_rdata`, `rw_rvalid` | out | read data, one cycle after the request |

Weights are unsigned, and so are activations. Weight bit `i` of HMU `h`, input
`c`, is bit `c` of row `8h + i` (or `8h + 4 + i` for the upper 4-bit weight).

## 7. How far this follows the published design

Taken from it:
* the organisation: 8 HMUs × 144 HCIMAs, 8 bits per HCIMA, 64 × 144 array;
* the split-port cell with its NOR digital multiplier and its pass-gate analog
  multiplier;
* the 3-bit N/Q output and the 3-bit, 3-cycle SAR ADC;
* 1..4-bit analog inputs through a switch-matrix DAC;
* the evaluator structure: adder, order shift, accumulator and threshold-selected
  multiplexer;
* six boundary candidates (5..10 for 8b × 8b);
* the digital / analog / discard rule with its 4-order analog window;
* the two modes, and the issue order shown in its 8b × 8b allocation example.

Chosen here, because the description does not give them:
* every cycle-level handshake and latency;
* the N/Q arithmetic;
* the DAC and ADC scaling and the rebuilding shift (section 4);
* register widths;
* the RW protocol;
* the 4-bit-weight row halves;
* unsigned operands;
* configuration arriving as ports.

Departures:
* **DMAC width.** The source gives the adder-tree output as 7 bits. A sum of 144
  one-bit products needs 8 bits, so the RTL keeps 8 bits to stay loss-free.
* **One clock, divided ADC.** The source suggests running the digital path at a
  higher clock than the ADC, without giving the ratio. Here there is one clock.
  `ADC_DIV` slows the ADC's bit decisions instead of adding a second clock
  domain. The speed across boundaries therefore depends on `ADC_DIV`, and it
  cannot be matched against the published speed/efficiency curve.
* **Ideal analog.** No noise is modelled, so the signal-to-noise trade-off across
  boundaries cannot be reproduced in simulation. Only the truncation and
  clipping of the 3-bit ADC show up.
* **Single tile.** A whole network does not fit in the macro, and the design has
  no weight reloading or partial-sum merging. The macro computes one
  144-input × 8-output dot product per operation. A host must tile larger
  layers.

## 8. Files and simulation

`rtl/` holds one module per file:
* `osa_pkg` (shared constants and types), `hcima`, `dat`, `nq`, `sar_adc`,
  `hmu`, `ose`, `accumulator`;
* `wl_driver`, `din_driver`, `ain_dac`, `rw_io`, `controller`;
* the top, `osa_hcim`.

`tb/tb_<module>.sv` is a self-checking testbench for each module. Each prints
`TB_RESULT checks=N failures=M`. `tb_osa_hcim` runs the full-size macro end to
end:
* it fills all 64 rows and reads some back;
* it runs 31 operations at 8b × 8b, 4b × 4b and 4b × 8b;
* it steers the thresholds so that every candidate boundary is used;
* it checks each result, `S`, `B` and the latency against an independent model;
* it confirms that concurrency, discarding, each analog precision, ADC clipping
  and both 4-bit weight halves all occurred.

`tb_osa_hcim_workloads` runs two workloads at full size. The first forces each
boundary from 10 down to 5 on the same 24 random vectors. It checks that the
error never grows as the boundary falls, and that the latencies match the table
in section 5. With the ideal analog model the signal-to-error ratio rises from
about 31 dB at B = 10 to about 66 dB at B = 5. A second macro with
`ADC_DIV = 2` runs alongside. It must give identical results with the latencies
of section 5. The second workload runs a 6 × 6 synthetic
image, with each pixel a 144-input vector. It checks that object pixels get a
more precise boundary than background pixels. It prints the map: 5 on the
object, 9 on the ring around it, 10 on the background.

To run a testbench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/osa_pkg.sv rtl/osa_hcim.sv \
              tb/tb_osa_hcim.sv --top-module tb_osa_hcim -o sim
    ./obj_dir/sim

Other blocks work the same way: replace the module and testbench names. Verilator
finds the submodules through `-Irtl`. The full-size test takes well under a
second of simulation after a compile of about half a minute.

The top's parameters are `NH` (HMUs, default 8) and `N` (columns, default 144).
The analog scaling of section 4 is exact only for `N = 144`. For other `N` the
ADC model uses `9X / (N·2^n)`, and the rebuilding shift is then approximate.
