# Frequency-domain compute-in-memory with collaborative in-memory digitization

Analog compute-in-memory (CiM) arrays save energy because they add many
products on a wire. The cost comes at the edges of the array: digital inputs
need DACs and analog outputs need ADCs, and a dedicated ADC per array can take
more area than the array itself. This design attacks that cost in two ways.

1. **ADC/DAC-free frequency transforms.** A 1x1 convolution in a DNN can be
   replaced by a fixed Walsh–Hadamard transform (WHT) followed by a trainable
   soft threshold. The transform matrix has only ±1 entries and needs no
   training, so it can be built as a fixed analog crossbar. Inputs are applied
   one bitplane at a time, so no DAC is needed. Each row's analog sum is cut
   to a single bit by a comparator, so no ADC is needed. The bits of
   successive bitplanes are joined into a multi-bit result, and the loop over
   bitplanes stops early once every output is known to be zero after the
   threshold.
2. **Memory-immersed collaborative digitization.** Where a multi-bit readout
   *is* needed, the array computing a multiply-average (MAV) is digitised by
   its neighbours. Their column lines, precharged in a chosen pattern, form
   the capacitive DAC of a SAR or flash converter. Only a comparator and a
   small controller are added. Using one, two or three neighbours gives SAR,
   flash or hybrid conversion. An asymmetric search that places its first
   references where the MAV usually falls saves comparisons.

This RTL models both parts. The analog parts are behavioural models: the
crossbar, the SRAM arrays and the comparator. The digital control around them
is synthesizable.

## Top level

`fdcim_top` places the subsystems side by side: the frequency-domain layer,
the four-array collaborative ADC and a six-array hybrid flash + SAR network.
They share only the clock and reset. The two techniques come from separate studies: the crossbar was
evaluated in simulation, the collaborative ADC on a four-array 65 nm test
chip. Nothing in the source connects one to the other, so neither does the
top.

```
fdcim_top
├── bwht_layer            frequency-domain layer, two passes (ports wht_*)
│   └── wht_engine
│       ├── cim_step_sequencer   four-step strobes
│       ├── bitplane_input_regs  sign-magnitude input, MSB plane first
│       ├── walsh_crossbar       analog ±1 crossbar, 1 bit per row   [behavioural]
│       ├── bitplane_accumulator joins bitplanes, early termination
│       └── soft_threshold ×N    S_T(x)
├── cim_adc_network       collaborative ADC (ports adc_*)
│   ├── scan_chain           weight loading
│   ├── mi_adc_ctrl ×2       digitization controller (SAR/flash/hybrid/asym) + paired SAR
│   ├── cim_array ×4         16x32 8T compute-in-SRAM arrays      [behavioural]
│   └── clocked_comparator ×3                                    [behavioural]
└── cim_hybrid_network    hybrid flash + SAR network (ports hyb_*)
    ├── scan_chain
    ├── mi_adc_ctrl ×3       one per product array
    ├── cim_array ×6         3 product arrays + 3 DAC arrays      [behavioural]
    └── clocked_comparator ×3                                    [behavioural]
```

Shared sizes and the Walsh-matrix function are in `cim_pkg`.

| parameter | default | meaning |
|---|---|---|
| `N` (`WHT_N`) | 32 | crossbar size, one WHT block (the 32×32 size of the circuit study) |
| `B` (`WHT_BITS`) | 8 | input magnitude bits = bitplanes (this design's choice; 2 to 10 bits were studied) |
| `NUM_ARRAYS` | 4 | CiM arrays A1..A4 |
| `ROWS`×`COLS` | 16×32 | array size |
| `ADC_BITS` | 5 | conversion resolution; needs `COLS = 2^ADC_BITS` |
| `LANES` | 3 | reference arrays/comparators that work at once (flash); product arrays of the hybrid network |

## The Walsh crossbar and the bitplane loop

### Matrix

The crossbar holds the sequency-ordered Walsh matrix. That is the Hadamard
matrix (`H_k = [[H,H],[H,-H]]`) with its rows sorted by number of sign
changes. Row `r` is Hadamard row `bitreverse(gray(r))`, and `cim_pkg::walsh_neg`
returns 1 for a −1 entry. Every cell is fixed: a "+1" cell or a "−1" cell.

### One bitplane: four steps

Each input element `i` has a sign `S_i` and a magnitude. For one bitplane, a
column whose bit is 1 drives its positive column line CL when `S_i = 0` and
its negative line CLB when `S_i = 1`. A column whose bit is 0 drives neither.
Then:

| step | strobe | what happens |
|---|---|---|
| 1 | `pch`, `cm` | precharge; input bits onto CL/CLB |
| 2 | `rl` | each cell computes its local nodes: "+1" copies CL→O, CLB→OB; "−1" crosses them |
| 3 | `rm` | row merge: O nodes shared on the sum line SL, OB nodes on SLB |
| 4 | `cmp` | comparator: row bit = 1 (+1) if SL > SLB, else 0 (−1) |

So the row bit is the sign of `Σ_c W[r][c]·s_c·b_c`. A tie gives 0. The
four steps fit in two cycles of a 4 GHz clock, one step per clock phase. In
this RTL, `clk` is that phase clock, so **a bitplane takes 4 `clk` cycles**.
The crossbar model keeps one register stage per step, so the steps must come
in order.

The use of `S_i` to choose between CL and CLB is this design's reading of
the drawing. The drawing shows a sign register beside each input register,
but the text never explains it.

### Joining bitplanes

Bitplanes go MSB first. The row bit of plane `k` carries weight `2^(B-1-k)`.
The row value is

    x = Σ_k (2·b_k − 1) · 2^(B−1−k)

This is the concatenated bits read as offset binary: an odd number in
`[−(2^B−1), 2^B−1]`. The output is then

    y = S_T(x) = sign(x)·(|x| − T)   if |x| > T,   else 0

with a threshold `T` for each row. Per-row thresholds are more general than
the per-layer `T_i` of the training method.

This is a heavy quantisation. A zero input vector gives `x = −(2^B−1)`,
because every tie reads as −1. The scheme relies on training the network
around the approximation.

### Early termination

After plane `k`, the planes still to come can move `x` by at most
`R_k = 2^(B−1−k) − 1`. If `|x_k| + R_k ≤ T`, the final `x` is sure to lie in
`[−T, T]` and `y = 0`. The row is marked done and ignores later bitplanes.
When every row is done and `et_en` is set, the engine skips the remaining
bitplanes.

The source describes early termination loosely, and its sentences conflict:

* one says higher bitplanes matter less;
* another says to stop when the partial sum is below a threshold;
* a third says a lower threshold stops more often.

Its figure shows a value that "falls within (−T) and (T)" after three
bitplanes. This design implements that figure with an exact bound, so early
termination never changes the result. An approximate rule would trade
accuracy for energy. To get one, replace the bound in `bitplane_accumulator`.

### Timing

`wht_engine` issues bitplanes back to back. The result of plane `k` is
accumulated during step 1 of plane `k+1`. Counting from the cycle `start` is
sampled to the cycle `done` is high takes **4·P + 4 cycles**, where P is the
number of bitplanes processed (P = B = 8 without early termination, so 36
cycles). `planes_used` reports P, which the source calls the "workload". The
testbenches check this latency. The source reports an average workload of
about 1.3 to 1.4 bitplanes for trained thresholds. Random thresholds, as in
the testbenches, stop less often.

### A whole layer: two passes

A network layer is `x_next = F0(S_T(F0(x)))`: transform, threshold in the
frequency domain, transform back. The sequency-ordered Walsh matrix is
symmetric and, up to a factor N, its own inverse, so `bwht_layer` runs the
same engine twice:

1. pass 1: the input, the row thresholds `T`, and early termination if
   `et_en` is set;
2. pass 2: `sign(y1)` and `|y1|` as input, threshold 0 and no early
   termination.

`|y1| ≤ 2^B − 1`, so it fits the B-bit magnitude. The pass-2 output is odd,
with `|y| ≤ 2^B − 1`, so it is a valid input for the next layer. Pass 2
starts in the cycle pass 1 finishes and adds `4·B + 4` cycles. With
`two_pass = 0` only pass 1 runs. `planes_used` and `early_term` always
describe pass 1.

### Where it departs from the source

* One engine is one power-of-two BWHT block. Splitting a longer vector into
  blocks is left to the caller.
* RM/CM voltage boosting, precharge polarity and all analog effects are not
  modelled.

## The collaborative ADC network

### Arrays as DACs

`cim_array` models an 8T compute-in-SRAM array with a 6T write port and a
2T product port. It has two modes:

* **Product mode.** Weight row `row_sel` meets the input bitplane `il`. Each
  column line discharges where both bits are 1, and the sum line averages
  the lines:
  `v = VDD·(1 − popcount(w & il)/32)`.
  With random bits this is about 0.75·VDD, the skewed MAV distribution the
  source measures.
* **ADC mode.** `ref_code` of the 32 column lines are precharged to VDD and
  the rest to ground. Charge sharing gives `v = VDD·ref_code/32`. The 32
  column lines are the unit capacitors of a 5-bit DAC.

`clocked_comparator` latches `v_in ≥ v_ref` on enabled edges.

The ideal output code is therefore `min(31, 32 − popcount(w & il))`. A MAV of
exactly VDD saturates at 31. The models are ideal: charge sharing has no
loss, and there is no offset unless the `OFFSET` parameter is set.

### Network and roles

`cim_adc_network` holds the four arrays on a ring. For a conversion, `src`
picks the product array. Arrays `src+1`, `src+2` and `src+3` become reference
lanes 0, 1 and 2. Analog muxes connect the product array's sum line to all
three comparators, and each reference array to its own comparator.

Lane 0, the nearest neighbour, serves every SAR cycle. Changing `src` between
conversions gives the neighbour role swap: A1 computes while A2 digitises,
then the reverse.

Weights are loaded through the scan chain. Shift in the 38-bit frame
`{array[1:0], row[3:0], data[31:0]}` with `scan_en`, first bit first, then
pulse `scan_update`.

### The search (`mi_adc_ctrl`)

The controller keeps the code interval `[lo, hi)`, starting at `[0, 32)`. In
each comparison cycle it picks references, reads the comparators and
narrows the interval:

* the new `lo` is the largest reference that compared high;
* the new `hi` is the smallest reference that compared low.

The conversion ends when `hi − lo = 1`.

| mode | references per cycle | cycles | comparisons |
|---|---|---|---|
| `ADC_SAR` | midpoint, 1 lane | 5 | 5 |
| `ADC_FLASH` | quarter points, 3 lanes | 3 (32→8→2→1) | 8 |
| `ADC_HYBRID` | cycle 0: `qref[0..2]` on 3 lanes; then SAR | 4 with 8/16/24 | 6 |
| `ADC_ASYM` | Q2, then Q3 or Q1, then SAR; 1 lane | 2 to 7 | = cycles |

Hybrid mode with 8/16/24 is the test chip's operating point: two MSBs by
flash, then three bits by SAR. The source's waveform figure shows four SAR
pulses after the flash cycle, while its text leaves three bits. This design
follows the text.

The asymmetric search uses the quartiles from the source, Q1 = 10111 (23),
Q2 = 11000 (24) and Q3 = 11001 (25). It compares at the median first, so
codes 23 and 24 resolve in two comparisons. Only the first two levels of the
search tree are given, so the rest is plain bisection. On codes drawn as
32 − Binomial(32, ¼), it averages about 4.4 comparisons against 5 for SAR.
The source reports 3.7 for its own tree and distribution.

In hybrid mode, loading Q1/Q2/Q3 into `qref` lets the flash cycle find the
asymmetric search's first interval at once. This is how the source says flash
"accelerates" the asymmetric search.

A reference outside `(lo, hi)` is not used. If no lane is usable, the cycle
falls back to the midpoint.

**Timing:** each comparison cycle takes three `clk` cycles:

1. PCH: references on the precharge inputs;
2. CMP: arrays settled, comparators enabled;
3. DECIDE: interval updated.

A network conversion takes `2 + 3·n_cycles` cycles from the start cycle to
`done`, one of them for the MAV to settle. `n_cycles` and `n_cmp` report
comparison cycles and individual comparisons, the latency and energy
measures of the search.

### Paired SAR after the flash cycle

In hybrid mode only lane 0 is used after the flash cycle, which leaves the
arrays of lanes 1 and 2 idle. With `pair_en` set at `start`, those two arrays
pair up for a second conversion once the flash cycle is over:

1. array `src+2` computes a new MAV from `row_sel2` and `il2`;
2. array `src+3` digitises it by SAR.

The pair uses the lane-2 comparator and a second `mi_adc_ctrl` instance with
one lane. The pair's conversion needs 1 `clk` for its MAV and 5 SAR cycles.
It therefore ends after the first conversion, 2 + 3 + 1 + 15 = 21 cycles
after `start`, and signals with `done2`/`code2`. `busy` stays high until both
conversions have finished. The source says only that the freed arrays work
with a nearby array in this way. Which arrays pair up, and the timing, are
this design's choice.

### Several product arrays: the hybrid network

`cim_hybrid_network` shares DAC arrays among several product arrays to
convert more MAVs per unit time. It has three product arrays, three arrays
held in ADC mode and three comparators. Each comparator has two analog muxes:
one picks the product array it sees, the other the DAC array.

One round converts one MAV from each product array:

| phase | comparison cycles | coupling |
|---|---|---|
| MAV | (1 `clk`) | all three product arrays compute |
| flash, array 1 | 1 | array 1 on all three comparators and DAC arrays |
| flash, array 2 | 1 | array 2 on all three |
| flash, array 3 | 1 | array 3 on all three |
| SAR | 3 | array k on comparator k and DAC array k, all at once |

Each product array has its own `mi_adc_ctrl` in hybrid mode. The network
holds a controller in its precharge phase (`hold`) while another one owns the
DAC arrays. With references 8/16/24 a round takes 2 + 3·(3 + 3) = 20 `clk`
for three codes. Three hybrid conversions one after another on the four-array
network take 3 · 14 = 42.

The weights of all six arrays load through one scan chain. Its frame is
`{array[2:0], row[3:0], data[31:0]}`, 39 bits. Arrays 0 to 2 are the product
arrays; arrays 3 to 5 are the DAC arrays. The DAC arrays never change role in
this network.

## Verification

Each module has a self-checking testbench in `tb/`. Each testbench compares
against reference models in `tb/tb_ref_pkg.sv`, written separately from the
RTL:

* a Walsh matrix built by Hadamard recursion and sign-change sorting;
* the soft threshold;
* the ideal ADC code.

| testbench | what it checks |
|---|---|
| `tb_cim_pkg` | Walsh entries for sizes 2 to 64; row orthogonality |
| `tb_walsh_crossbar` | row bits vs. exact signed product-sums; dense, sparse and zero planes |
| `tb_cim_step_sequencer` | step order, one strobe per cycle, 4-cycle period, restart |
| `tb_bitplane_input_regs` | MSB-first planes, index, sign |
| `tb_soft_threshold` | exhaustive 9-bit x, T in steps of 3 |
| `tb_bitplane_accumulator` | values, termination flags, `all_term_next` |
| `tb_bwht_layer` | two-pass layer vs. a two-pass reference, pass-1 planes and flags, latency |
| `tb_wht_engine` | outputs, `planes_used`, 4P+4 latency, with and without early termination |
| `tb_cim_array` | MAV and DAC voltages |
| `tb_clocked_comparator` | decision and hold |
| `tb_scan_chain` | parallel and serial contents |
| `tb_mi_adc_ctrl` | every code in every mode: result, cycle/comparison counts, 3-cycle latency; average comparisons of SAR vs. asymmetric; `hold` |
| `tb_cim_adc_network` | scan loading, conversions in all modes with every array as product array; paired SAR code and 21-cycle latency |
| `tb_cim_hybrid_network` | three codes per round; three flash cycles, three SAR cycles with all three arrays converting, 20-cycle rounds |
| `tb_fdcim_top` | all three subsystems together at default sizes; counts every mechanism and fails if one never occurs |

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. Run one with
Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fdcim_top \
    -Irtl -Itb -y rtl -y tb +libext+.sv rtl/cim_pkg.sv tb/tb_ref_pkg.sv tb/tb_fdcim_top.sv
./obj_dir/Vtb_fdcim_top
```

The behavioural models use `real` voltages. Synthesis tools will reject
`cim_array`, `clocked_comparator` and everything that instantiates them. The
synthesizable parts are `bwht_layer`, `wht_engine` and its sub-blocks (the crossbar model
included), `mi_adc_ctrl` and `scan_chain`.
