# Comparison-free unary sorter with an FSM-based unary number generator

This is a hardware sorter that puts N unsigned M-bit numbers into ascending
order **without a single magnitude comparator**. Every input is turned, in
parallel, into a *right-aligned unary stream*: one bit per clock cycle, first
`v` ones, then zeros for ever. The streams of all inputs start together. So
the stream that drops to 0 first belongs to the smallest input, the next one
to drop belongs to the next-smallest, and so on. The sorter watches for these
first zeros and writes the matching values out as they appear. The smallest
results come out first. A full sort takes about as many cycles as the largest
input value.

The second idea is how cheap the stream generator is. A classic unary
generator needs an M-bit counter and an M-bit comparator for each input. Here
each input needs only its own input register, a subtractor, an OR gate and one
flip-flop. This lane is called CFUNG (comparison-free unary number generator).
It counts its own register down, and it needs no counter shared with the other
lanes.

The RTL is SystemVerilog (IEEE 1800-2017) and is parameterised by `N`
(number of inputs, default 32) and `M` (bits per input, default 16).

## 1. The CFUNG lane: a two-state unary generator (`rtl/cfung.sv`)

Each lane holds a register `R` (M bits) and a stream flip-flop `b`. On every
enabled cycle it does this:

```
d      = R - b          // subtract the previously generated bit
out_or = |d             // OR of all bits of the difference
R     <= d
b     <= out_or         // the next unary bit
```

While `R` is non-zero, `b` is 1 and `R` falls by one each cycle. The first
time the difference is 0, `b` becomes 0. From then on `0 - 0 = 0`, so the
stream stays at 0. Seen as a state machine, the flip-flop `b` has two states:
"producing 1" and "producing 0". Its only transition is from 1 to 0, and it
happens when `out_or` is 0. Loading a value clears `b`, so the first step
subtracts nothing.

Example with M = 3 and input 4 (binary 100, the fraction 0.5):

| enabled step k | R before | R - b | out_or = new b |
|---:|---:|---:|---:|
| 1 | 4 | 4 - 0 = 4 | 1 |
| 2 | 4 | 4 - 1 = 3 | 1 |
| 3 | 3 | 2 | 1 |
| 4 | 2 | 1 | 1 |
| 5 | 1 | 0 | **0** |
| 6.. | 0 | 0 | 0 |

The stream is 1,1,1,1,0,0,0,0. Written with the first bit on the right, that
is `00001111`: four ones in eight cycles, i.e. 0.5. In general, after `k`
enabled steps the bit is `k <= v` and the register holds `v - min(k-1, v)`.
**A lane holding `v` produces its first 0 at step `v + 1`, and its register is
0 at that moment.**

## 2. Finding the minimum (`rtl/sed.sv`, `rtl/sorting_engine.sv`)

The smallest-element detector (SED) has two flip-flops per lane:

* `found`: this lane's stream has already produced its first 0. It is set
  once and cleared only by the next load.
* `hit`: this lane has been flagged as the current minimum and has not been
  written out yet.

In a step where the streams advance, a lane that is not yet `found` and whose
next bit (`out_or`) is 0 sets both flip-flops. This happens at the same clock
edge at which its stream flip-flop takes the 0. The detector also gives three
combinational outputs from the `hit` vector:

* `ds` (detection signal): the number of flagged lanes, a population count.
  `ds = 2` means the next minimum value occurs twice.
* `addr`: the index of one flagged lane, from a priority encoder. The lowest
  index wins.
* `dup` (duplication sign): high when `ds > 1`.

Tied values finish their streams in the same step and are flagged together.
They are then written out one after another. The sort is stable: for equal
values, the lower input index comes first.

The sorting engine is simply `N` CFUNG lanes feeding one detector.

## 3. Sequencing and value recovery (`rtl/controller.sv`, `rtl/mux_adder.sv`)

The controller has two working states and an idle state:

```
            start                ds > 0 (Enable already 0)
   IDLE ───────────▶  FIND  ──────────────────────────▶  PUT
    ▲                  ▲  │ ds == 0: Enable = 1,           │ one write per cycle,
    │                  │  └ streams step, Elapsed_Cycle++  │ X counts writes
    │                  └───────── X == ds, values left ────┤
    └──────────────── X == ds, all N written (done) ───────┘
```

* **FIND ("find the index").** `Enable = 1` as long as `ds == 0`. All lanes
  advance one stream bit and the `Elapsed_Cycle` counter counts the step.
  Enable is gated by `ds == 0` inside the state. So in the cycle in which a
  minimum is flagged, the streams are already stopped. Otherwise the next
  step would flag the next-larger value too and mix two groups.
* **PUT ("put the results").** Enable is 0, so the streams are frozen. Each
  cycle the lane at `addr` is written to the output registers and its `hit`
  is cleared, which moves the priority encoder to the next flagged lane.
  Counter X counts the writes. `ds` is latched on entry, and the state
  returns to FIND after exactly `ds` writes.
* A down counter holds the number of values still to be written. It starts
  at N. The output address is `N - remaining`, so results land at addresses
  0, 1, 2, … in ascending order. When the counter reaches 0 the controller
  returns to IDLE and pulses `done`.

**How the value is recovered.** A flagged lane has counted its register down
to 0, so the register no longer holds the value. The value is known from
timing instead: the lane was flagged at step `v + 1`, so
`Elapsed_Cycle = v + 1`. The MUX/Adder selects the flagged lane's register
(which is 0) and adds `Elapsed_Cycle - 1`. This gives `v`.

### Cycle-by-cycle example

Three inputs with M = 3: p1 = 4, p2 = 6, p3 = 4 (0.5, 0.75, 0.5).

| cycle | state | what happens | ds | Elapsed |
|---:|---|---|---:|---:|
| 0 | IDLE | `start`: lanes load 4, 6, 4 | 0 | 0 |
| 1–4 | FIND | steps 1–4, all streams still 1 | 0 | 1–4 |
| 5 | FIND | step 5: p1 and p3 produce their first 0 and are flagged | 0→2 | 5 |
| 6 | FIND | ds = 2: streams held, go to PUT | 2 | 5 |
| 7 | PUT | write Out[0] = 0 + 5 − 1 = 4 (lane 1); clear its flag | 2 | 5 |
| 8 | PUT | write Out[1] = 4 (lane 3); X == ds, back to FIND | 1 | 5 |
| 9–10 | FIND | steps 6, 7: p2 flagged at step 7 | 0→1 | 6–7 |
| 11 | FIND | ds = 1: go to PUT | 1 | 7 |
| 12 | PUT | write Out[2] = 6; last value, back to IDLE | 1 | 7 |
| 13 | IDLE | `done` pulse | 0 | 7 |

### Latency

From the cycle in which `start` is seen to the cycle in which `done` is high,
a sort takes exactly

```
1 + (Vmax + 1) + G + N   cycles
```

Here `Vmax` is the largest input and `G` is the number of distinct input
values. The parts are:

* 1 cycle to load.
* `Vmax + 1` stream steps.
* One cycle per distinct value, to stop the streams.
* One write per input.

The worst case is `2^M + 2N + 1` cycles. The cost depends on the data, not
only on N: small values sort fast, and the k-th smallest result is ready
after `v_k + 1` stream steps. For M = 16 the worst case is about 65 600
cycles, so this architecture suits small M (5 to 8 bits) or data that is
concentrated at small values.

The table below shows measured stream steps (`Elapsed_Cycle`) at which the
k-th minimum of 128 inputs was found. The data come from one run of
`tb/gauss_sort_tb.sv`: samples from N(μ, 0.3²), redrawn if outside [0, 1),
scaled by 2^M.

| M | μ | 1st | 32nd | 64th | 96th | 128th |
|---|---|---:|---:|---:|---:|---:|
| 5 | 0.1 | 1 | 4 | 8 | 14 | 31 |
| 5 | 0.5 | 1 | 11 | 16 | 23 | 32 |
| 6 | 0.1 | 1 | 10 | 17 | 25 | 52 |
| 6 | 0.5 | 2 | 19 | 34 | 45 | 64 |
| 8 | 0.1 | 1 | 24 | 58 | 113 | 205 |
| 8 | 0.5 | 18 | 103 | 132 | 170 | 247 |

## 4. Top level and interface (`rtl/unary_sorter.sv`)

`unary_sorter #(N, M)` connects the sorting engine, the controller, the
MUX/Adder and the output register file `sorted_data`. Shared types (the
controller state enum) and the default sizes are in `rtl/unary_sorter_pkg.sv`.

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start` | in | 1 | while idle: capture `in_data` and start sorting |
| `in_data` | in | N×M | unsorted inputs, `in_data[i]` is input i |
| `busy` | out | 1 | a sort is in progress |
| `done` | out | 1 | one-cycle pulse; `sorted` is complete |
| `wr_valid`, `wr_addr`, `wr_data` | out | 1, ⌈log2 N⌉, M | each result as it is written (address 0 = smallest) |
| `sorted` | out | N×M | all results, `sorted[0]` smallest; held until the next sort overwrites them |
| `ds`, `dup` | out | ⌈log2(N+1)⌉, 1 | detection signal and duplication sign, for observation |
| `elapsed_cycle` | out | M+1 | stream steps taken in the current sort |

Usage: hold the inputs on `in_data` and raise `start` for one cycle while
`busy` is low. Results stream out on `wr_*` in ascending order. After `done`,
a new sort may start in the very next cycle.

## 5. What follows the published design, and what is this design's own

These parts follow the published design:

* The CFUNG lane: register minus previous bit, OR, flip-flop.
* First-zero detection of the minimum.
* `ds` as a count of flagged lanes, a priority encoder with a duplication
  sign.
* A controller with the two states "find the index" and "put the results",
  with an up counter X, an `X == ds` test, a down counter for the output
  address and an `Elapsed_Cycle` counter.
* Value recovery by register + `Elapsed_Cycle` − 1.
* The block structure: engine, controller, MUX/Adder, output registers.

These choices are this design's own, because the published description does
not settle them:

* **Start and end.** The published controller has no start or end condition.
  The IDLE state, `start`, `done` and `busy` are added. The down counter is
  used both for the ascending output address and to end the sort.
* **Loading.** Inputs are loaded in parallel from `in_data` into the lanes'
  registers. The input register of the block diagram and the per-lane
  register of the engine are treated as one register. The value recovery
  only works that way, since it reads a register that has been counted down
  to 0.
* **Stopping on a minimum.** Enable is gated by `ds == 0` inside FIND. This
  costs one extra cycle per distinct value (the `G` in the latency formula),
  but it keeps groups of different values apart.
* **Holding ties.** Flags are held and cleared one per write. `ds` is latched
  for the `X == ds` test.
* **Priority.** Lowest index first.
* **The detector circuit.** The published lane draws the detector as a NOR
  gate driving a flip-flop with a constant-1 data input. Here it is written
  as the two flip-flops `found` and `hit`, which do what the text describes
  for that circuit.
* **Reset.** All state has an asynchronous active-low reset. Widths of the
  counters: `Elapsed_Cycle` has M+1 bits, `ds` and X have ⌈log2(N+1)⌉ bits.

The published description once says that the *maximum* is put on the output
registers. Everywhere else it speaks of the minimum, and the design takes
minima.

Sizes evaluated in the literature range from N = 8 to 256 and M = 8 to 32.
The defaults here (N = 32, M = 16) are one of them. The RTL holds the others
by overriding `N` and `M`. No area, power or timing figures are claimed for
this RTL.

## 6. Verification

Each module has a self-checking testbench in `tb/` that ends with a line
`TB_RESULT checks=<n> failures=<n>`:

| testbench | what it establishes |
|---|---|
| `cfung_tb` | the 3-bit example gives `00001111`; random 16-bit values with a random clock enable match the closed form above; disabled cycles change nothing |
| `sed_tb` | with ideal streams driven in: `ds`, `dup`, `addr` and `hit` against a reference model, every cycle; ties; the 4/6/4 example |
| `sorting_engine_tb` | real lanes: every lane is found in stable ascending order after exactly `v + 1` steps, with its register at 0 |
| `controller_tb` | against a behavioural engine model: Enable/CNTEN rules, PUT lasting `ds` cycles, addresses 0..N−1, `Elapsed_Cycle = v + 1` at each write, exact latency |
| `mux_adder_tb`, `sorted_data_tb` | value recovery arithmetic; register file writes |
| `unary_sorter_tb` | the whole sorter at the default N = 32, M = 16: example values, full-range data including 0 and 65535, heavily tied data, all-equal data and back-to-back sorts; every result, the final array and the exact latency; it also checks that single-minimum stops, tied-minimum stops, zero and full-scale inputs and back-to-back starts all occur |
| `sized_sort_tb` (with `sized_sort_run`) | corner sizes of the published synthesis sweep: N = 8 and N = 256 at M = 8 over the full value range, and N = 64 at M = 32 with values below 5000, since a full 32-bit range would take up to 2^32 cycles per sort |
| `gauss_sort_tb` (with `gauss_sort_run`) | N = 128 and M = 5, 6, 8 on Gaussian data (four means each), as in the cycle-count evaluation; checks all results and prints the table of section 3 |

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
    rtl/unary_sorter_pkg.sv tb/unary_sorter_tb.sv --top-module unary_sorter_tb
./obj_dir/Vunary_sorter_tb
```

Replace `unary_sorter_tb` with any other testbench name. Each test runs in
well under a second. The controller also carries concurrent assertions for
its handshake rules: a PUT cycle always has a flagged value, X never exceeds
the latched `ds`, and no write happens past N values. They are disabled
while `rst_n` is low and are active under `--assert`.

## 7. Files

| file | content |
|---|---|
| `rtl/unary_sorter_pkg.sv` | default sizes, controller state type |
| `rtl/cfung.sv` | one unary-generator lane with its input register |
| `rtl/sed.sv` | smallest element detector: flags, priority encoder, ds, dup |
| `rtl/sorting_engine.sv` | N lanes + detector |
| `rtl/controller.sv` | FIND/PUT controller with its counters |
| `rtl/mux_adder.sv` | lane select and value recovery |
| `rtl/sorted_data.sv` | output register file |
| `rtl/unary_sorter.sv` | top level |
| `tb/*.sv` | testbenches listed above |
