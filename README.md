# A voltage-island systolic array with Razor-driven supply calibration

This design is a small TPU-style matrix engine for an FPGA. Its purpose is to save power. Each region
of the FPGA runs from its own core supply (Vccint), and that supply is set as low as the logic in
the region will tolerate. The multiply-accumulate (MAC) array is cut into *partitions*. A partition
whose MACs have timing slack to spare gets a lower supply than one whose MACs are near their
timing limit. Two mechanisms choose the voltages:

* a **static scheme** gives each partition a first estimate, spread evenly over the "critical
  region" between the voltage at which the FPGA crashes (Vcrash) and the lowest voltage that is
  still fully safe (Vmin);
* a **runtime scheme** then corrects each estimate by one voltage step per calibration round.
  Every MAC carries a *Razor* register that detects results arriving too late at the lowered
  voltage. A partition in which any MAC saw a late result is stepped up; a partition with no late
  result is stepped down.

The RTL here covers all the digital parts: the MAC array with Razor detection, the per-partition
failure flags, both voltage algorithms, and enough TPU around the array (buffers, operand skew,
sequencer) to run real matrix multiplies end to end. The analog side is not RTL. That side is the
power distribution unit, which turns the requested voltage codes into separate supply rails, and
the FPGA floor-planning that puts each partition in its own region. Neither exists in FPGAs
today. The design outputs the requested voltage of each partition as a number, in microvolts, and
leaves the rest to that external hardware.

## Block diagram

```
 host port ──► unified_buffer ──► (act vectors) ──► systolic_data_setup ──► act_top[j]
     ▲              ▲                                                             │
     │              │ results                                                     ▼
     │         tpu_control ◄──────────────── y[i][j] ◄──── systolic_array (ROWS x COLS mac)
     │              │                                          ▲        │ err[i][j]
 w_push ──► weight_fifo ──► (weight vectors) ──► systolic_data_setup ──► wgt_left[i]
                                                                        ▼
                        vs_init ──► static_vscale ──load──► runtime_vscale ◄── part_fail_monitor
                                    (Algorithm 1)           (Algorithm 2)       (timing_fail-part-i)
                                                                  │
                                                                  ▼
                                                vccint_uv[p] ──► external power distribution
```

`tpu_top` ties these together. The default size is a 16 x 16 array split into four 8 x 8 quadrants:

| partition index | position     | static Vccint (Vcrash 0.95 V, Vmin 1.00 V) |
|-----------------|--------------|--------------------------------------------|
| 0               | top-left     | 0.95625 V                                  |
| 1               | top-right    | 0.96875 V                                  |
| 2               | bottom-left  | 0.98125 V                                  |
| 3               | bottom-right | 0.99375 V                                  |

## The MAC and its Razor register

This is the part that needs the most care.

Each MAC (`mac.sv`) is output-stationary. It multiplies the two operands that reach it, adds the
product to its own accumulator Y (2n bits for n-bit operands), and passes both operands on, one
register later, to its neighbours. Activations travel along the array's first index and weights
along the second. The generate blocks are named `GEN_REG_I` / `GEN_REG_J` with instances `uut`, so
a timing path reads like `GEN_REG_I[0].GEN_REG_J[1].uut/... -> GEN_REG_I[1].GEN_REG_J[1].uut/y`.

The accumulator is a `razor_ff`:

* the **main register R** takes `y + a_in*b_in` at the rising edge of `clk`;
* the **shadow register S** takes a second, independently computed sum at the rising edge of
  `dclk`, which is `clk` delayed by T_del;
* the **flag F** (`err`) is registered on `clk` and is high when R and S differ.

When the supply is too low, the main multiply-add can settle after `clk` has sampled it but before
`dclk` does. R then holds a stale value and S the correct one, and F rises one clock later.

The shadow register is fed by a **duplicated multiplier and adder**, not by the main path's
wires. In RTL simulation there is no path delay. If S simply re-sampled the main sum at `dclk`, it
would see the *next* cycle's inputs, because R and the neighbours' operand registers have already
moved on by then. So the shadow copy works from values that this MAC registered at the `clk` edge:
the operands it just consumed (`prev_activ` and `prev_weight`, the same registers it forwards to its neighbours), the clear, and
its own running sum. `S + prev_activ*prev_weight` at `dclk` then equals the `R` captured at `clk`, as long as
nothing was late. This also doubles the multiplier and adder count, which is the cost of Razor
in this scheme.

Two consequences are worth knowing:

* After a late result, R and S keep different running sums. F therefore **stays high until the
  next clear** of the accumulators. No correction of R from S is built. The flag marks the tile's
  result as untrustworthy and drives the voltage up; it does not repair the result.
* A clear resynchronises R and S within two clocks. The sequencer clears the partition flags for
  two cycles at the start of each command, so that a flag left over from the previous command
  cannot be counted again.

A zero-delay simulator never produces a late result on its own. The testbenches emulate one by
forcing a MAC's main register to a wrong value right after a `clk` edge, between `clk` and
`dclk`. That is exactly what a late-settling path does to R.

## Partition flags

`part_fail_monitor` maps MAC (i, j) to partition
`(i / (ROWS/PART_ROWS)) * PART_COLS + j / (COLS/PART_COLS)`. For each partition it forms

* `fail_now`, the OR of the partition's MAC flags in the current cycle, and
* `fail_seen`, a sticky copy that collects every failure since the last clear. This is
  `timing_fail_part` at the top level.

The OR follows the rule "if any MAC of the partition fails, raise its voltage". Setting
`AND_REDUCE = 1` makes the flag need *all* of the partition's MACs to fail instead. That is the
other reading of the rule; it only fires when the whole partition is failing.

## Supply voltage arithmetic

All voltages are unsigned integers in microvolts (`VOLT_W = 24` bits). That keeps the algorithm's
half steps exact.

**Static scheme** (`static_vscale`, one partition per clock after `start`):

```
Vs = (Vmin - Vcrash) / n
Vl = Vcrash
for i in 0 .. n-1:  Vccint[i] = (2*Vl + Vs) / 2 ;  Vl = Vl + Vs
```

Each partition sits in the middle of its own slice of the critical region. Partition 0, meant for
the MACs with the most slack, gets the lowest voltage. `done` pulses n + 2 clocks after `start`.
With 0.95 V / 1.00 V / n = 4, Vs is 12.5 mV. A second example, 0.5 V to 1.2 V, gives Vs = 175 mV
and 0.5875 / 0.7625 / 0.9375 / 1.1125 V.

**Runtime scheme** (`runtime_vscale`, all partitions in the same clock on each `step`):

```
Vccint[i] += Vs  if timing_fail_part[i]  else  Vccint[i] -= Vs
```

A step that would take a voltage out of [Vcrash, Vnom] is refused. The voltage and its step count
are then left alone, and `at_limit[i]` is set. `c_steps[i]` holds the signed net number of steps
C_i, so the current request is `Vccint_static[i] + C_i * Vs`.

In `tpu_top` one runtime step is taken at the end of every command started with `calib_en` set.
The intended use is a few *trial runs* with calibration on, before real work with calibration off.
For example, the end-to-end test runs four commands on the default configuration; Razor fires only
in partition 2, and only during the first command:

| after command        | P0 (mV) | P1 (mV) | P2 (mV) | P3 (mV) |
|----------------------|---------|---------|---------|---------|
| static               | 956.25  | 968.75  | 981.25  | 993.75  |
| 1 (failure in P2)    | 956.25 (refused) | 956.25 | 993.75 | 981.25 |
| 2 (clean)            | 956.25 (refused) | 956.25 (refused) | 981.25 | 968.75 |
| 3 (calibration off)  | 956.25  | 956.25  | 981.25  | 968.75  |
| 4 (clean)            | 956.25 (refused) | 956.25 (refused) | 968.75 | 956.25 |

## Matrix multiply on the array

One command computes `P = W * X`:

* X is K activation vectors of COLS operands, stored in the unified buffer at `act_base ..
  act_base+K-1`. Operand j of a word sits in bits `[8j+7:8j]`.
* W is K weight vectors of ROWS operands, pushed into the weight FIFO. Operand i sits in bits
  `[8i+7:8i]`.

MAC (i, j) ends with `P[i][j] = sum_k W[i][k] * X[k][j] mod 2^16`.

The two `systolic_data_setup` blocks delay operand lane k by k clocks. Element k of activation
column j and element k of weight row i therefore meet in MAC (i, j). `tpu_control` sequences:

| phase  | cycles              | what happens |
|--------|---------------------|--------------|
| CLEAR  | 2                   | clear accumulators (1st cycle) and partition flags (both cycles) |
| STREAM | K + stalls          | per k: read X[k], pop W[:,k]. If the FIFO is empty: stall, feed a zero bubble to both streams, k holds |
| FLUSH  | ROWS + COLS + 1     | zeros, until the last wavefront reaches MAC (ROWS-1, COLS-1) |
| DRAIN  | ROWS * 2            | write result row i as two buffer words at `res_base + 2i` (columns 0-7, then 8-15; 16 bits each, column 0 lowest) |
| CALIB  | 1                   | one runtime voltage step if `calib_en` was set with `start` |
| DONE   | 1                   | `done` high |

So `done` is high K + stalls + ROWS + COLS + 1 + 2*ROWS + 4 clocks after the `start` cycle. At the
default size with no stalls, that is K + 69. A zero bubble enters both operand streams in the same
cycle, so the two streams stay aligned. Stalls change only the latency, never the result.

The buffer is dual-ported: the host uses one port and the sequencer the other. Both have a
one-clock read latency. The host should not write the result area while a command runs.

## Top-level interface (`tpu_top`)

| group          | ports | notes |
|----------------|-------|-------|
| clocks         | `clk`, `dclk`, `rst_n` | `dclk` = `clk` delayed by T_del (< half a period in the tests: 3 of 10 units). Reset asynchronous, active low |
| host buffer port | `host_we`, `host_addr[7:0]`, `host_wdata[127:0]`, `host_rdata[127:0]` | read data one clock after the address |
| weight input   | `w_push`, `w_data[127:0]`, `w_full` | push only when `w_full` is low |
| command        | `start`, `act_base`, `k_len`, `res_base`, `calib_en`, `busy`, `done`, `stall` | arguments sampled in the `start` cycle |
| voltage        | `vs_init`, `v_min_uv`, `v_crash_uv`, `v_nom_uv`, `vs_ready`, `v_step_uv`, `vccint_uv[4]`, `c_steps[4]`, `timing_fail_part[4]` | `vs_init` runs the static scheme and loads its result, and `vs_ready` then rises |

Parameters: `ROWS`, `COLS` (16), `PART_ROWS`, `PART_COLS` (2), `DATA_W` (8), `ACC_W` (16),
`VOLT_W` (24), `UB_DEPTH` (256), `WF_DEPTH` (64), `CNT_W` (8). The array size and the partition
grid can be changed independently, as long as ROWS and COLS divide evenly by the partition grid.
For instance, ROWS = COLS = 64 with PART_ROWS = 2, PART_COLS = 1 gives two 32 x 64 partitions.
The result write-back assumes a square array and `ACC_W` a multiple of `DATA_W`.

## Where this design goes beyond, or departs from, its source

* **Operand width** is not specified by the source; 8-bit operands and a 16-bit (2n) accumulator
  are used. The source's timing report names a 17th accumulator bit. Here the accumulator wraps
  at 2n bits, as the MAC drawing shows.
* **Static voltages** follow the algorithm exactly: 0.95625 / 0.96875 / 0.98125 / 0.99375 V. The
  source quotes 0.956 / 0.968 / 0.985 / 0.993 V for the same case, and its third value does not
  follow from the algorithm. Its result tables use the values rounded to 0.96 / 0.97 / 0.98 /
  0.99 V.
* **Partition flag reduction**: the source describes it both as "any MAC fails" and as an AND of
  all MAC flags. OR is the default here; AND is a parameter.
* **Step direction**: one passage restricts the runtime correction to upward steps (C_i >= 0).
  The algorithm itself steps both ways, and that is what is built.
* **Voltage window, sticky flags, calibration timing, stall/bubble handling, buffer sizes, the
  command sequence, reset**: none of these are specified by the source. They are this design's
  choices.
* **Dataflow**: output-stationary, as the MAC drawing (an accumulator fed back into its own adder)
  implies. A remark in the source about partial sums flowing toward the bottom rows belongs to a
  weight-stationary array and is not followed.
* **Equal partitions**: the source's clustering of MACs by minimum slack (K-means, DBSCAN, ...) is
  an offline software step that may produce unequal groups. Like the source's own implementation,
  this RTL uses equal rectangular partitions.
* **Not in RTL**: PCI, host interface, DDR3 controller and DRAM, instruction buffer, the
  delayed-clock generator, the per-partition supply rails and their boost circuit. The top
  exposes plain ports where they would connect.

## Files

`rtl/` holds one module or package per file. `tpu_pkg.sv` holds the shared sizes, the voltage type
and the partition-mapping function. `tb/` has one self-checking testbench per module, named
`tb_<module>.sv`. Each prints `TB_RESULT checks=N failures=M` and ends by itself; a watchdog stops
it if it hangs.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_razor_ff` | on-time data lands in R and S, and late data (after `clk`, before `dclk`) raises F one clock later |
| `tb_mac` | running sum modulo 2^16, operand forwarding, a Razor hit after a disturbed R, resync on clear |
| `tb_systolic_array` | full 16 x 16 product against a reference, and a single disturbed MAC flags alone |
| `tb_part_fail_monitor` | quadrant mapping, sticky flags, clear priority, and the AND reading |
| `tb_static_vscale` | both worked examples above, n + 2 cycle latency |
| `tb_runtime_vscale` | steps up, down and refused at both limits, against a model |
| `tb_systolic_data_setup`, `tb_unified_buffer`, `tb_weight_fifo` | skew, dual-port read/write and collision rule, FIFO order and flags |
| `tb_tpu_control` | sequence, gating, drain packing and exact latency, with a randomly empty FIFO |
| `tb_tpu_top` | end to end at default size: static scheme, four matrix multiplies, stalls, a Razor failure in one partition, and the resulting voltage steps |
| `tb_tpu_workloads` (with helper `tpu_workload_run`) | a trial run each at 32 x 32 in four 16 x 16 partitions, 64 x 64 in four 32 x 32 partitions at 0.7 / 0.8 / 0.9 / 1.0 V, and a two-partition grid at 0.5 / 0.6 V |

To run one, for example the end-to-end test, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/tpu_pkg.sv tb/tb_tpu_top.sv --top tb_tpu_top
./obj_dir/Vtb_tpu_top
```

For the unit tests, list the module's file (and `rtl/razor_ff.sv` / `rtl/mac.sv` where they are
used) instead of `-y rtl`; `tb_tpu_workloads` needs `-y rtl -y tb`. Every testbench simulates in
under a second. Building the 64 x 64 configuration takes verilator several minutes.
