# MC-CIM: a compute-in-memory macro for Monte-Carlo Dropout

Monte-Carlo Dropout turns a trained network into an approximate Bayesian one.
The same input is run many times, here 30. Each run drops a different random
subset of neurons. The mean of the outputs is the prediction and their spread
is the confidence. That multiplies the inference work by the number of runs.
This macro attacks the cost in three ways:

* **Dropout happens in the array.** A dropped input neuron is a column
  line that is not driven. A dropped output neuron is a row that is not
  selected. The random bits come from random-number generators built into
  the SRAM, so no separate sampler or extra data movement is needed.
* **Successive runs reuse each other's work.** Run *i* starts from the
  product-sum of run *i − 1*. It adds only the inputs that were just switched
  on and subtracts those that were just switched off. If the dropout words
  are computed in advance and ordered so that neighbouring words differ
  little, the remaining work shrinks a lot.
* **The ADC is cheaper.** The ADC that digitises the array's analog
  sum-line searches in the order of the expected value distribution, not by
  plain binary search. Frequent values resolve in one to three compares
  instead of five.

The RTL models a 16 × 31 8T-SRAM array with 6-bit sign-magnitude weights
and activations. Around it are four embedded RNGs with their calibration
logic, the dropout registers, a dropout schedule memory, the asymmetric SAR
logic, a shift-add and reuse buffer, and a sequencer. Everything is
synthesizable SystemVerilog. The one exception in kind is the RNG core: it is
an analog cross-coupled inverter pair, so it is given as a behavioural model
(written in synthesizable form so that the whole macro can be mapped).

## Files

| file | role |
|---|---|
| `rtl/mc_cim_pkg.sv` | sizes (16 rows, 31 columns, 6 bits, 2 neurons, 4 RNGs, 30 iterations) and the evaluation-kind enum |
| `rtl/cim_array.sv` | the SRAM array: row write, and the in-memory AND and count |
| `rtl/cci_rng.sv` | behavioural model of one embedded cross-coupled-inverter RNG |
| `rtl/rng_calibrator.sv` | coarse bias calibration of one RNG |
| `rtl/dropout_regs.sv` | next, current and previous dropout words, and the reuse masks |
| `rtl/dropout_schedule_sram.sv` | memory for 30 precomputed, ordered dropout words |
| `rtl/xadc_sar.sv` | asymmetric successive-approximation search |
| `rtl/shift_add.sv` | turns the bitplane counts into a signed product-sum |
| `rtl/reuse_buffer.sv` | previous product-sum per neuron, with a valid bit |
| `rtl/mcd_controller.sv` | sequencer of the iterations, passes and evaluations |
| `rtl/mc_cim_top.sv` | the macro |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_mc_cim_top` runs the whole macro at full size; `tb_fc10_mc100` runs a small layer workload |

## The operator and how the array computes it

The network operator is multiplication-free:

    y = Σ_i  sign(x_i)·|w_i|  +  sign(w_i)·|x_i|

It needs only sign-times-magnitude products, and those reduce to ANDs of bits.

**Array cell and evaluation.** Each 8T cell has a separate read port. An
evaluation does the following:

1. The selected row line (RL) is asserted.
2. The column lines (CL) carry one input bit each.
3. The product line (PL) of a column discharges when the CL bit and the
   stored bit are both 1.
4. All product lines share one sum line. Its voltage falls in proportion to
   how many product lines discharged.

`cim_array` models this as `pl = row & cl` and `mav = popcount(pl)`. That
count is 0…31, a 5-bit value, and is exactly what the ADC digitises. The
array samples on a single clock edge when `eval` is high. The chip's
precharge and discharge phases inside that clock are not modelled.

**Row layout.** Weights are stored as bitplanes. Neuron *k* owns six rows:

| row | contents |
|---|---|
| `6k` | sign(w), where 1 = negative |
| `6k+1+b` | bit *b* of \|w\|, for b = 0…4 |

Sixteen rows hold two neurons, rows 0–11. Rows 12–15 are unused. The sign
convention is the one of the bitplane example that comes with the design: a
weight vector 2 6 2 −3 1 5 7 −1 4 has the sign row 0 0 0 1 0 0 0 1 0.

**Three evaluations per bitplane.** A sum line only counts discharges. It
cannot produce a signed ±1 sum by itself. For every magnitude bitplane
b = 0…4, this design therefore runs three evaluations on the kept columns
(mask = input dropout word):

| kind | row | column lines | contribution |
|---|---|---|---|
| `EV_POSX` | \|w\|_b | mask & x ≥ 0 | `+count << b` |
| `EV_NEGX` | \|w\|_b | mask & x < 0 | `−count << b` |
| `EV_NEGW` | sign(w) | mask & \|x\|_b | `(pop − 2·count) << b` |

In the third row, `pop` is the number of kept columns with bit *b* of |x|
set. The input driver knows it digitally. `pop − 2·count` is then
Σ sign(w)·|x|_b, since columns with w ≥ 0 add and those with w < 0 subtract.
`shift_add` adds these terms into a 16-bit signed accumulator. The largest
magnitude is 31·31·2 = 1922.

**Departure.** The source design describes the operator as taking 2(n−1)
bitplane cycles for n-bit operands: one sign(x)·|w| and one sign(w)·|x|
evaluation per bitplane. Here it takes 3(n−1) = 15, because the
sign(x)·|w| half is split by the sign of x. That is this design's way of
getting a signed result from a count. A sum-line scheme that encodes ±1
directly (for example with a differential precharge) would save one
evaluation per bitplane. It is not described in enough detail to build.

**Skipped evaluations.** An evaluation whose column word is all zero is not
run, because its count is known to be 0. This is where sparse dropout words
and compute reuse save time and ADC energy.

## One iteration, cycle by cycle

`mcd_controller` runs `num_iter` iterations (default 30) for the latched
input vector. Each iteration does the following:

1. **Get a dropout word.** In RNG mode it waits until the next-word
   register is full. In schedule mode it reads word *i* from the schedule
   memory, which takes one cycle.
2. **For each output neuron *k*:**
   * If its output dropout bit is 0, the neuron is dropped. Its rows are not
     selected, its result is 0, and its reuse-buffer entry is marked stale.
   * Otherwise, in the typical flow, one pass uses the mask `DO_i` and
     starts from 0.
   * With compute reuse and a valid previous value, there are two passes
     that start from `P_{i−1}`. An adding pass uses the mask
     `DO_i & ~DO_{i−1}` (newly kept inputs). A subtracting pass uses
     `~DO_i & DO_{i−1}` (newly dropped inputs).
   * Each pass runs the 15 evaluations above. The result is written back to
     the reuse buffer.
3. **Report.** All product-sums appear on `result`, with a one-cycle
   `iter_valid` strobe and `iter_idx`.

**Timing.** Every executed evaluation costs *L* + 5 cycles, where *L* is the
number of compares the SAR needs (1…5). That is the array evaluation cycle,
one ADC start, *L* compares, the cycle that returns the code, one accumulate
and one step to the next evaluation.
A skipped evaluation costs 2 cycles. Each neuron adds 2 cycles and each
iteration adds 3, or 4 in schedule mode. Array, ADC and accumulation run one
after the other. The source design overlaps precharge, evaluation and
conversion within clock phases, which this model does not.

**Counters.** The macro counts its own work:

| counter | what it counts |
|---|---|
| `n_eval` | evaluations run |
| `n_skip` | evaluations skipped |
| `n_adc_cyc` | SAR compare cycles |
| `n_full_pass` | full passes |
| `n_reuse_pass` | reuse passes |
| `n_mac` | driven column lines, summed over all evaluations (the MAC work) |

These counts are the quantities behind the energy savings claimed for
compute reuse and sample ordering.

## Compute reuse and the dropout registers

`dropout_regs` holds three words of 33 bits each:

| bits | meaning |
|---|---|
| 0–30 | keep bits of the 31 inputs |
| 31–32 | keep bits of the 2 output neurons |

A 1 means kept. The three words are:

* **next**, filled by the RNGs four bits per clock while the current word
  is being used. RNG sampling for frame *i + 1* thus overlaps compute of
  frame *i*.
* **current**.
* **previous**, which is cleared for the first iteration of each input.

The reuse masks are the two simple gate functions above.

**Output dropout and reuse.** Output dropout interacts with reuse in a way
the source design does not discuss. A neuron dropped in iteration *i* is
not evaluated. Its `P_{i−1}` is therefore missing in iteration *i + 1*.
`reuse_buffer` keeps a valid bit per neuron, and dropping a neuron clears
it. The next time that neuron is kept it gets a full pass from 0 instead of
an incremental one.

**Expected savings.** With independent dropout at p = 0.5, about half the
inputs change between two iterations. The add and subtract passes together
touch about as many columns as a typical pass. Reuse alone therefore gains
little at this size: in the end-to-end test, 3452 against 3882 column
activations. The large gain comes from ordering. When the schedule words are
arranged so that neighbours differ in a few bits, which is what a
travelling-salesman ordering of the samples achieves, the passes are nearly
empty. Most evaluations are skipped. In the test the MAC work drops to 842,
under a quarter of the typical flow. The ordering itself is computed offline
and is not part of the hardware.

The same holds on a small fully connected layer of 10 inputs and 10 outputs
with 100 random samples, run as five two-neuron weight loads. Reuse needs
2668 multiply-accumulates against 2700 for the typical flow. It also takes
about 38% more clock cycles: each neuron now runs two passes, and neither
pass is empty often enough to be skipped. On 30 of those samples written to
the schedule memory, a greedy nearest-neighbour tour roughly halves the
Hamming path length, from 132 to 70. Reuse then needs 150
multiply-accumulates, about half of the typical 306, and 20% fewer cycles
than the drawn order. So for random samples the typical flow (`cr_en = 0`) is
the faster choice, and compute reuse pays off together with ordering.

## Embedded random bits and their calibration

The 31 input bits and 2 output bits of a dropout word come from four RNGs.
Four is ⌈31 / (2·(6 − 1))⌉, one RNG per group of columns that share one
during a 6-bit evaluation.

Each RNG is a cross-coupled inverter pair. Both ends are precharged, then
left to discharge through the leakage of a programmable number of SRAM
bitline columns, N on one end and M on the other, and finally resolved. The
imbalance N − M sets the bias p1, the probability of a 1, and device
mismatch adds a random offset.

**RNG model.** `cci_rng` is a behavioural model:

    p1 = 0.5 + 0.06·(N − M) + offset,   offset uniform in ±0.35 per instance

The result is clipped to [0.02, 0.98], and the model gives one bit per
enabled clock. The noise that decides the race is a 32-bit xorshift
generator, compared with p1 in 16-bit fixed point; the offset of each
instance is a hash of its `SEED` parameter. The slope, the offset range and
the noise source are model assumptions.

**Calibration.** `rng_calibrator` implements the coarse calibration loop:

1. Start with N = M = 4.
2. Generate 500 test bits and count the ones.
3. If the count is within `tol` of `target`, stop.
4. Otherwise change one column count by one and repeat. A Toggle bit
   alternates between adjusting N and adjusting M.
5. After 32 tries the calibrator gives up and raises `fail`.

**Departure.** The source flow chart places "M−1" on the same branch as
"N−1". Under any model where the bias depends on N − M, those two moves push
the bias in opposite directions. This design moves M opposite to N, so that
every step moves the bias toward the target:

| p1 | Toggle = 0 | Toggle = 1 |
|---|---|---|
| too high | N − 1 | M + 1 |
| too low | N + 1 | M − 1 |

If a count would leave 0…8, the other count moves instead.

During calibration the RNGs feed only the calibrators. Inference takes RNG
bits only when no calibration is running.

## The asymmetric successive-approximation ADC

The sum-line value is strongly skewed. With sparse inputs most counts are
small. A conventional SAR needs 5 compares for every 5-bit value.
`xadc_sar` instead keeps an interval `[lo, hi)` of still-possible codes.
Each compare splits the interval at the reference where the expected
distribution is cut into two equal halves:

* The distribution is programmed as a cumulative table
  `cdf[k]` = expected count of values below *k*, with 33 entries of 16 bits.
* The reference for `[lo, hi)` is the smallest *k* in `(lo, hi)` with
  `cdf[k] ≥ (cdf[lo] + cdf[hi]) / 2`.
* The conversion ends as soon as one code is left.

A linear table (`cdf[k] = k`) gives exactly the conventional 5-compare
binary search. A table built from a histogram of real sum-line values gives
a search tree in which frequent codes sit near the root.

In the chip, the references come from the bitline capacitors of a
neighbouring array and the comparator is analog. Here the compare is the
exact integer compare `value ≥ reference`. The number of compares is
reported per conversion (`ncyc`).

**Results** from the end-to-end test, compares per evaluation:

| mode | compares per evaluation |
|---|---|
| symmetric | 5.00 |
| compute reuse, table from the typical-flow histogram | 3.88 |
| ordered schedule, table from its own histogram | 2.21 |

The source design reports about 2.7 for the asymmetric case and about 2 for
reuse with ordering.

## Schedule memory and modes

`dropout_schedule_sram` holds 30 words of 33 bits, written by the host and
read one per iteration with one cycle of latency. Thirty matches the 10–30
iterations that suffice for the output statistics. The macro has two
independent mode bits:

| `use_sched` | `cr_en` | flow |
|---|---|---|
| 0 | 0 | typical: RNG dropout, full pass per neuron |
| 0 | 1 | RNG dropout with compute reuse |
| 1 | 1 | precomputed ordered schedule with compute reuse (the most efficient configuration) |
| 1 | 0 | schedule without reuse (for comparison) |

`adc_cdf` selects symmetric or asymmetric conversion in every mode.

## Host interface of `mc_cim_top`

| step | signals | details |
|---|---|---|
| load weights | `w_we`, `w_addr`, `w_data` | one 31-bit row per cycle, with the row layout above |
| load activations | `x_load`, `x_sign_in`, `x_mag_in[0..4]` | signs are 1 = negative; `x_mag_in[b]` is magnitude bitplane *b* |
| write schedule | `sched_we`, `sched_waddr`, `sched_wdata` | schedule words as above |
| calibrate | `cal_start`, `cal_target`, `cal_tol` | all RNGs together; target and tolerance are counts out of 500; `cal_done`, `cal_fail` and the chosen `rng_m_cols` / `rng_n_cols` come back per RNG |
| infer | `start`, `num_iter`, `cr_en`, `use_sched`, `adc_cdf` | results arrive on `result`, `result_kept`, `iter_valid` and `iter_idx`; `done` marks the last iteration |

`num_iter` may be up to 255 from the RNGs, but at most 30 from the schedule.
Averaging or majority voting over the iterations, and the variance that
gives the confidence, are left to the host.

## What the macro does not do

* It holds one 31-input, 2-neuron tile. Full networks such as LeNet-5 for
  digit recognition or an Inception-based pose regressor need an external
  tiling controller. That controller would reload weights and add partial
  sums, and it is not part of this design.
* The travelling-salesman ordering of the samples is an offline computation.
  It is also not part of this design.
* No analog behaviour is modelled beyond the RNG: no sum-line nonlinearity,
  comparator offset or leakage-limited accuracy.
* **Array size.** The array is 16 rows by 31 columns, as the design is
  specified. The overview drawing of the macro shows word lines RL0…RL63.
  With 64 rows, ten neurons would fit: change `ROWS` in the package.

## Simulation

Each testbench is a stand-alone top. The end-to-end test, for example:

    verilator --binary -Wall -Wno-fatal --top-module tb_mc_cim_top \
        rtl/mc_cim_pkg.sv rtl/*.sv tb/tb_mc_cim_top.sv
    ./obj_dir/Vtb_mc_cim_top

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. Verilator has two logic states, so every register the design
reads is reset.

**`tb_mc_cim_top`** runs the macro at its default size, about 1.5 minutes
of simulation. It:

1. calibrates all four RNGs to 250 ± 30 ones in 500 bits (p1 = 0.5 ± 0.06);
2. loads random weights and activations;
3. runs three 30-iteration inputs:
   * typical flow with the symmetric ADC,
   * compute reuse with a table built from the first run's sum-line
     histogram,
   * an ordered schedule, where each word differs from the previous in one
     or two bits and includes one output dropout, run twice with its own
     table.

Every result is checked against a reference model of the operator applied
to the dropout word actually used. The test also checks:

* the exact 5 compares per conversion of the symmetric search;
* the savings listed above;
* that output dropout, full passes and reuse passes each happened.

**Unit testbenches:**

| testbench | what it checks |
|---|---|
| `tb_cim_array` | random rows and column words against AND/popcount |
| `tb_cci_rng` | bias direction and one-cycle latency |
| `tb_rng_calibrator` | convergence for several offsets and targets 0.3 / 0.5 / 0.7, with a model RNG |
| `tb_xadc_sar` | every value with linear and skewed tables; exact compare counts |
| `tb_dropout_regs` | fill, masks and schedule mode |
| `tb_dropout_schedule_sram` | contents and latency |
| `tb_shift_add` | term arithmetic |
| `tb_reuse_buffer` | priority and valid bits |
| `tb_mcd_controller` | the sequencer with a model array and ADC, including exact cycle counts |

**Workload testbench.** `tb_fc10_mc100` runs the 10 × 10 layer described
under compute reuse on the full-size macro. It checks every product-sum of
the 5 × 2 × 100 RNG samples and the two 30-sample scheduled runs. It also
requires the ordered schedule to beat the drawn order in both
multiply-accumulates and cycles, and to stay under 70% of the typical
multiply-accumulate count.
