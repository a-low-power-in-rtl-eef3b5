# Differential RRAM multiply-accumulate core with M-RD4 inputs and M-CSD weights

A resistive memory array can compute a dot product in place. Each row carries
one input value on its word line, each cell stores a weight bit, and the
charge that the cells of a column pass over a fixed time is proportional to
the number of conducting cells. Feeding an 8-bit input one bit per step means
eight integration steps per operation. Every conducting low-resistance cell
burns energy in each step, so the number of steps and the number of `1` cells
set the power.

This core saves on both counts:

* **Inputs in modified radix-4 (M-RD4).** An 8-bit unsigned input becomes
  four signed digits in {-2, -1, 0, +1, +2}. The recoding is Booth-like, with
  two extra rewrites (`0100 -> 0011`, `1011 -> 1100`) that turn many ±2
  digits into ±1 digits. That matters because a ±1 digit needs one
  integration and a ±2 digit needs the heavier path.
* **Weights in modified canonical signed digit form (M-CSD).** Each weight
  bit is a *pair* of cells, b (positive) and c (negative), so a digit can be
  +1, 0 or -1. Runs of ones are rewritten as `1 0 … 0 -1`, which cuts the
  number of low-resistance cells and therefore the current.
* **Charge-domain weighting.** Each weight-bit column has its own integration
  capacitor, and the capacitors are binary-scaled. Charge sharing with a
  sampling capacitor then applies the weight-bit significance (2^k) and the
  digit significance (4^j). No digital shift-and-add is needed, and only one
  8-bit ADC per neuron (eight columns) remains.

The RTL here consists of two kinds of blocks:

* **Synthesizable:** the digital parts, i.e. the recoders, the M-CSD encoder,
  the word-line gating and the phase controller.
* **Exact integer behavioural models:** the analog parts, i.e. the RRAM
  array, the integrators and the SAR ADC.

Together they reproduce the arithmetic of the circuit bit for bit. With
default parameters the core has 256 input rows and 32 output neurons, with
8-bit inputs, 8-bit signed weights and 8-bit outputs.

## Contents

| File | Role |
|---|---|
| `rtl/cim_pkg.sv` | shared types: `mrd4_t` digit, `sw_t` switch bundle, `phase_e` |
| `rtl/mrd4_encoder.sv` | serial M-RD4 recoder, one per input row |
| `rtl/mcsd_encoder.sv` | weight → (w_p, w_n) M-CSD pair, on the write path |
| `rtl/wordline_gating.sv` | which cell of each row pair is driven in which phase |
| `rtl/cim_controller.sv` | phase sequencer |
| `rtl/diff_rram_array.sv` | behavioural array: count of conducting cells per column |
| `rtl/integral_multiplier.sv` | behavioural integrators and charge redistribution (one per neuron) |
| `rtl/sar_adc.sv` | behavioural 8-bit differential SAR ADC (one per neuron) |
| `rtl/cim_core.sv` | top level |
| `tb/` | one self-checking testbench per block, plus `tb_cim_core` (reduced size) and `tb_cim_core_full` (default size) |

## M-RD4 input recoding

Write the input X as bits x7…x0 and append a 0 below x0. The recoder works on
one overlapping four-bit window per digit, `a3 a2 a1 a0`, where:

* `a3 a2 a1` = x[2j+2], x[2j+1], x[2j] (zero above the MSB);
* `a0` is a bit carried over from the previous window.

It applies the two rewrites:

```
F = ~a3 a2 ~a1 ~a0     (0100 -> 0011)
G =  a3 ~a2 a1 a0      (1011 -> 1100)
t2 = G | ~F a2    t1 = F | ~G a1    t0 = F | ~G a0
```

It then emits the digit z_j = -2·t2 + t1 + t0. The bit carried into the next
window is t2. On the wires, the digit is one-hot on `z2, zm2, z1, zm1`; all
four low means 0, and the row is then not driven at all.

**Worked examples.** 82 = 0101 0010 gives digits 1 1 0 2 (MSB first), and
125 = 0111 1101 gives 2 0 -1 1.

**Hardware and timing.** In hardware the window is picked by a multiplexer
that a small digit counter steers, and the carried bit is a flip-flop. The
block latches X on `load` and steps to the next digit on `advance`, so one
digit stays on the word lines for a whole digit period.

**Input range.** For X < 128 the digits always sum back to X (Σ 4^j z_j). With
an 8-bit input the top window has no room for a sign extension. Inputs with
the MSB set therefore come out right only in some cases, for example 128.
Keep inputs at 7 significant bits, as a ReLU output quantised to 0…127 would
be. The testbench covers all 256 inputs against a reference written straight
from the recoding rules.

## M-CSD weight encoding

A signed weight w (|w| ≤ 255) is first placed in the b cells (w > 0) or the c
cells (w < 0). The digit string is then rewritten from the LSB up. The
rewrites stop below the run of non-zero digits that contains the MSB, which is
left untouched.

* `1 1 0 1 1` becomes `1 1 1 0 -1`: the lower three digits are rewritten and
  the scan skips two places.
* A run of three or more equal non-zero digits becomes `1 0 … 0 -1`: the
  digit just above the run is set, and the digits inside the run are cleared.
* The same two rewrites apply to negative digits with the signs mirrored.

**Worked examples.**

| weight | b cells | c cells |
|---:|---|---|
| -119 | 0000 1001 | 1000 0000 |
| 123 | 1000 0000 | 0000 0101 |

A digit +1 becomes a 1 in `w_p` (b cell) and -1 becomes a 1 in `w_n` (c
cell). `w_p - w_n` always equals w. No bit position is set in both, and the
number of set cells never exceeds the plain binary count.

**Hardware.** The encoder is one combinational block with the scan unrolled
`W_BITS+1` times. It sits between the weight-write port and the array, so
software writes plain two's-complement weights.

## The neuron: integration and charge redistribution

This is the part that takes the most care. Each neuron owns:

* eight weight-bit columns (k = 0…7);
* for each column, a positive integration capacitor C_p,k and a negative one
  C_n,k;
* two sampling capacitors C_S,p and C_S,n;
* one ADC.

The capacitors are binary-scaled:

```
C_f = 2·C_7 = 4·C_6 = … = 2^8·C_0,   C_S = C_f   (the column capacitors sum to C_f)
```

### One half-step

A half-step runs four phases and then a redistribution:

1. **Positive clear:** every C_p,k goes back to Vdd.
2. **Positive integration:** the word lines are driven, and the cells that
   conduct in column k pull C_p,k down by U per cell. U is one unit of
   integrated drop.
3. **Negative clear:** the same as step 1, for the C_n,k capacitors.
4. **Negative integration:** the same as step 2, for the C_n,k capacitors.

After these four phases comes **redistribution**: all C_p,k and C_S,p are
connected, and likewise on the negative side.

Because C_p,k is 2^(8-k) times smaller than C_f, a drop of c_k·U on column k
counts as c_k·2^(k-8) on the shared node. The node then averages with the
charge already on C_S. The result is

```
V_S  <-  ( Σ_k c_k · 2^(k-8) · U  +  V_S ) / 2
```

### Half A, half B and the whole MAC

Each digit runs two half-steps:

* **half A** integrates only the rows whose digit is ±1;
* **half B** integrates only the rows whose digit is ±2.

Half B comes second and is halved one time fewer, so it counts twice. Over the
four digits, taken LSB first, each later digit is halved two times fewer than
the one before, which gives the factor 4^j. At the end:

```
V_S,p − V_S,n = U · 2^-(8+8) · Σ_rows X_r · W_r
```

This is exact for X < 128. In the model the voltages are integers in units of
U/2^16, so the integer difference `vp − vn` *is* Σ X·W with no rounding at
all.

### Which cell is driven in which phase

The word-line gating block decides this:

| phase | digit > 0 | digit < 0 |
|---|---|---|
| positive integration | drive b cell | drive c cell |
| negative integration | drive c cell | drive b cell |

So the positive side collects the products whose sign is +, and the negative
side those whose sign is −. Rows whose digit does not belong to the current
half stay off.

### What the model leaves out

The integrators are ideal: there is no capacitor saturation and no regulator
error, and the high-resistance cells conduct nothing. In a real array those
set the accuracy.

Fed with the cell counts of the worked example, the model reproduces the
printed transient values to within 0.5 mV when U = 254.6 mV. Those values are
61.19, 30.49, −46.12, −23.09, −11.66, −5.85, −2.93 and 59.73 mV.

## ADC

The ADC is a differential SAR converter. It decides one bit per clock, MSB
first, on `vp − vn`. Its LSB is 2^8 model units, which is about 1 mV for
U ≈ 255 mV. The output is

```
y = saturate_8bit( floor( Σ X·W / 256 ) )      two's complement, −128 … 127
```

For the example input 125 and weight 123, Σ X·W = 15375 and y = 60. The
reference circuit reads 59 for the same case, and so does its own ideal
calculation (59.89 mV on a 1 mV LSB). With U ≈ 255.3 mV, a 1 mV LSB is about
256.7 model units rather than exactly 256. The LSB is rounded to a power of
two here so that the code is a plain shift of the exact sum.

The LSB scaling is a parameter of the top, `ADC_LSB_LOG2`. Its default is
`W_BITS + 2·M − 8`, or 0 (one unit product per LSB) when that would be
negative, as it is for the low-precision patterns below. The ADC range covers |Σ X·W| ≤ 32767, so a dense 256-row
dot product of large values saturates. The full-size test shows 28 of 32
neurons saturating on such a vector. Scale inputs or weights so that the
expected sum stays in range, or raise `ADC_LSB_LOG2`.

## Controller and timing

One MAC runs through the following phases, one clock per phase:

```
INIT                                   C_S back to Vdd
for digit j = 0..3, half in {A, B}:
    P_CLR  (S2,SP)  P_INT (S1,SP)  N_CLR (S3,SN)  N_INT (S1,SN)  REDIST (S4,S5)
CONV × 9                               S5 open, ADC converts
```

The S-names are the switches of the neuron circuit. `cs_rst` and `half_b` are
added control bits: `cs_rst` returns C_S to Vdd, and `half_b` tells the gating
which digits belong to the current half.

* **Recoders:** loaded in the cycle `start` is accepted, and advanced in the
  redistribution cycle of half B.
* **Busy time:** `busy` stays high for 1 + 10·4 + 8 + 1 = 50 cycles.
* **Result:** `y_valid` pulses once, 51 cycles after the accepting clock edge,
  with all 32 codes on `y`.
* **Start while busy:** ignored.
* **Throughput:** one result vector per 51 cycles. Meeting the reference
  throughput of about 1.85 M MAC vectors/s would need a sequencer clock of
  about 92 MHz, i.e. about 13 ns per phase. That matches the roughly 130 ns
  per digit of the reference waveform.

### Top-level ports (`cim_core`)

| port | dir | meaning |
|---|---|---|
| `w_we, w_row, w_neuron, w_value` | in | write one signed weight (W_BITS+1 bits) into row `w_row`, neuron `w_neuron`; one per clock, while idle |
| `start, x_in[ROWS]` | in | start a MAC on unsigned inputs |
| `busy, y_valid, y[NEURONS]` | out | status and signed results |
| `phase, digit_idx` | out | current controller phase and digit (for observation) |

Parameters: `ROWS` (256), `NEURONS` (32), `IN_BITS` (8), `W_BITS` (8),
`ADC_BITS` (8), `ADC_LSB_LOG2`.

## Departures from the reference design

* **Array size.** The reference design quotes the array as 256 × 512 and also
  says it holds a 256 × 256 matrix. With 8-bit weights stored as cell pairs,
  those two statements cannot both hold. Here 512 is read as cells per row,
  i.e. 256 cell pairs per row. That gives 256 rows × 32 neurons of 8-bit
  weights.
* **Bit weighting.** One of the reference equations gives the lowest weight
  bit the factor 2^(-n+1). The capacitor ratios and the worked example agree
  on 2^(k−n), and the model follows those.
* **M-CSD example value.** The M-CSD algorithm is implemented literally. The
  reference text claims that the largest value keeps the pattern `11011011`
  (219), but applied literally the algorithm rewrites 219 to `1110 0-10-1`.
* **Digit counter.** The reference text lists the same counter state for the
  first two clocks. Here the counter simply counts 0, 1, 2, 3.
* **Clocking.** One clock per phase, the INIT cycle and the ADC sequencing are
  this design's choices, because no timing diagram was available.
* **Weight encoding in hardware.** The M-CSD encoder is hardware on the write
  port; the reference design assumes weights are encoded offline.
* **ADC output.** The code format (two's complement with saturation) and the
  exact LSB of 2^8 units are chosen here. The model therefore gives 60 where
  the reference circuit gives 59, for both its ideal and its simulated value.
* **Not modelled:**
  * the regulator in front of each integrator, whose effect (integration
    linear in cell count) is assumed;
  * the router adders that sum partial results when a layer needs more than
    256 rows, which belong to a multi-core system.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/cim_pkg.sv tb/tb_ref_pkg.sv tb/tb_cim_core.sv --top-module tb_cim_core
./obj_dir/Vtb_cim_core
```

Replace `tb_cim_core` with any testbench in `tb/`.
`tb_cim_core_full` runs the default 256 × 32 core. Its Verilator build takes
about a minute and a half, and the run takes a few seconds.

### What the tests cover

* **Recoder:** all 256 inputs against a literal reference, both worked
  examples, and a one-hot check on the outputs.
* **M-CSD encoder:** all weights from −255 to 255 against a loop-based
  reference. It also checks the value, that no position is set in both halves,
  that the cell count is no higher than binary, and both worked examples.
* **Word-line gating:** random digits under every switch setting.
* **Controller:** the exact phase sequence, the 50-cycle busy time, the
  recoder steps, the ADC start, and a start while busy.
* **Array:** column counts against a shadow copy.
* **Integrator:** the printed transient voltages, plus random closed-form
  sums.
* **ADC:** floor and saturation over a sweep, and the 8-cycle conversion.
* **Top (16 rows × 4 neurons):**
  * random MACs against floor(Σ X·W / 256) with saturation, with latency 51;
  * it counts each mechanism and fails if any never occurs: the F and G
    rewrites, zero/±1/±2 digits, M-CSD rewrites, negative weights, positive
    and negative saturation, inputs ≥ 128, and an ignored start.
* **Full size:** writes all 8192 weights and checks three MACs.
* **Precision patterns:** `tb_cim_core_modes` runs the core with 3-bit
  inputs and 1-bit (ternary) weights, and with 2/2, 3/2, 4/4 and 8/8 bits,
  only by setting `IN_BITS` and `W_BITS`. Fewer input bits mean fewer digits
  (2 digits for 3 or 4 bits, so 31 cycles per MAC). Each pattern runs six
  random full-range MACs at 32 rows × 4 neurons.
