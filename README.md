# Power emulation: a circuit that measures its own power

Estimating the power of a large design at register-transfer level is slow. Most of the
time goes into evaluating a power macromodel for every component on every simulated
cycle. Power emulation moves that work into hardware. Each RTL component gets a small
circuit beside it that watches the component's input and output bits and evaluates the
component's macromodel as the design runs. A strobe triggers the evaluation, and an
adder sums the results. The enhanced design can then be put on an FPGA or emulator and
driven with the usual stimulus, and it reports its own power estimate at hardware speed.

This RTL is a complete worked example of that idea. The functional circuit is a small
binary-search engine: a handful of muxes, adders, comparators and registers, plus an FSM.
It is enhanced with one power model per component, one power strobe generator and one
power aggregator. All of it is synthesizable SystemVerilog. Testbenches check the search
results, the cycle counts and the power numbers against independent reference models.

```
            first last value            data (from memory)
              |    |    |                 |
        +-----v----v----v-----------------v-----+       +-------------+
 start->|  bs_controller (FSM) + bs_datapath    |--taps-| 19 x        |  pm_power[19]
        |  muxes, +, >>1, <, =, <=, +/-,        |       | power_model |-------------->
        |  reg_mid reg_c0..c2 reg_first/last/out|       +------^------+
        +---------+-------------------+---------+              | strobe   |
                  | addr, mem_rd      | out, done       +------+------+   v
                  v                   v                 | power_      | +------------+
            (external sorted memory)                    | strobe_gen  | | power_     |-> cycle_power
                                                        +-------------+ | aggregator |-> total_power
                                                                        +------------+-> n_strobes
```

## The hardware power model

The macromodel is a cycle-accurate linear regression over transitions. Take a component
with N monitored bits x_1..x_N, counting both inputs and outputs. Over one strobe period
it consumes

    P = sum_i Coeff_i * T(x_i)

where T(x_i) is 1 if bit i changed since the previous strobe, and 0 otherwise.
`power_model` evaluates this in four steps:

1. **Queue.** Two registers hold the bits seen at the last two strobes: `q_cur`, the
   current value, and `q_prev`, the one before it. On each strobe the current value moves
   into `q_prev` and the new value is sampled into `q_cur`.
2. **Transition count.** `q_cur ^ q_prev` gives one bit per monitored signal.
3. **Multiply.** The transition count is a single bit, so multiplying it by the CW-bit
   coefficient is just an AND of the coefficient with that bit.
4. **Add.** The N gated coefficients are summed, and the sum is registered on `power`.

Timing. Suppose `x` is sampled on a strobe in cycle t. The power of the transition from
the previous sample to this one appears on `power` in cycle t+2, with `valid` high for
that one cycle. `power` holds its value until the next evaluation.

The first strobe after reset has no earlier sample to compare with, so it reports 0. The
coefficients are a parameter: CW-bit unsigned values packed into `COEFFS`, with bit i's
coefficient at `[i*CW +: CW]`. The output width `PW` must be able to hold N·(2^CW−1). An
elaboration-time check enforces this.

**The coefficient values are placeholders.** In a real flow they come from
characterizing each component type in the target cell library, and no such table is
available here. `pe_pkg::pm_coeff(id, n)` gives every monitored bit of every model a
distinct, deterministic weight between 8 and 36. This exercises the hardware the way real
coefficients would. The absolute power numbers it produces mean nothing. To use real
values, replace `pm_coeff`, or pass per-instance `COEFFS` in `pe_binsearch_top`.

## What is monitored: the component bundles

A power model watches *every* input and output bit of its component. `bs_datapath`
exports these bits as one packed struct, `pe_pkg::dp_taps_t`, with one member per
component. The top adds the FSM's bundle, which is its state plus its control word.
Inputs that are tied to a constant (the `1` of `+/-`, the `-1` of the `reg_out` mux) never
toggle, so they are left out.

| id | component | monitored bits | N |
|---|---|---|---|
| 0, 1 | `+` operand muxes (ports or registers) | two data inputs, select, output | 31 each |
| 2 | `+` adder | two operands, 11-bit sum | 31 |
| 3 | `>> 1` | sum in, halved index out | 21 |
| 4, 5 | `<`, `=` comparators | memory word, key, result | 33 each |
| 6 | `<=` comparator | reg_first, reg_last, result | 21 |
| 7 | `+/-` unit | reg_mid, add/subtract, result | 21 |
| 8, 9 | muxes before reg_first / reg_last | port, `+/-` result, select, output | 31 each |
| 10 | mux before reg_out | reg_mid, select, output | 21 |
| 11, 15–17 | reg_mid, reg_first, reg_last, reg_out | D, load enable, Q | 21 each |
| 12–14 | reg_c0, reg_c1, reg_c2 | D, load enable, Q | 3 each |
| 18 | FSM | state (3), control word (11) | 14 |

Model *i* is `g_pm[i].u_pm` in `pe_binsearch_top`. Its output is `pm_power[i]`, so the
host can read the power of any single component as well as the total.

## Strobe and aggregation

**Strobe.** There is one clock domain, so there is one `power_strobe_gen`. While
`pe_enable` is high, it emits a one-cycle strobe every `strobe_period` cycles. A value of 0
or 1 means every cycle, which is the cycle-accurate mode the macromodel is meant for.
Longer periods are this design's addition. With a longer period, each model compares
samples taken `period` cycles apart. A bit that toggles and toggles back between two
samples then counts as no transition. The estimate becomes cheaper to read out, but it
is coarser. Each strobe is a registered pulse, and the first one comes one cycle after
`pe_enable` rises.

**Aggregation.** `power_aggregator` is a chain of adders over the 19 model outputs. When
the models report, it registers the circuit's power for that strobe period on
`cycle_power`. It adds the same value into the 48-bit `total_power` and counts the period
in `n_strobes`. Average power per strobe period is `total_power / n_strobes`. `pe_clear`
zeroes both counters. It has priority, so a report that arrives in the same cycle is
dropped. In the top, a strobe in cycle t reaches `cycle_power` and `total_power` in cycle
t+3.

The power hardware only observes. Turning it on or off, or changing the strobe period,
never changes what the search circuit computes.

## The example circuit: binary search

`bs_controller` and `bs_datapath` search the range [first, last] of an external sorted
memory for `value`. The memory holds ascending, unsigned 16-bit words. The result `out` is
the index where the key was found, or −1. Indices are 10-bit signed values. They have to
hold −1, which `last` reaches when it steps below 0, and 256, which `first` reaches when
it steps past the last word of the 256-word memory. The memory must be synchronous with a
one-cycle read latency: `mem_rd` and `mem_addr` in cycle t give `mem_data` in cycle t+1.

The FSM runs one state per cycle:

| state | action |
|---|---|
| IDLE | on `start`: reg_first ← first, reg_last ← last, reg_mid ← (first+last)>>1 (the `+` muxes select the ports) |
| CHK | reg_c2 ← reg_first ≤ reg_last; read memory at reg_mid |
| CMP | if not reg_c2: reg_out ← −1, go to DONE; else reg_c0 ← data < value, reg_c1 ← data = value |
| UPD | if reg_c1: reg_out ← reg_mid, go to DONE; elif reg_c0: reg_first ← reg_mid+1; else reg_last ← reg_mid−1 |
| NEXT | reg_mid ← (reg_first+reg_last)>>1 (the `+` muxes select the registers), go to CHK |
| DONE | `done` high for one cycle |

Each probe costs four cycles. Let cycle 0 be the cycle in which `start` is seen. A key
found on the k-th probe gives `done` in cycle 4k. A search that ends after k probes
because the range became empty gives `done` in cycle 4k+3. For example, a 256-word range
takes at most 9 probes, so `done` comes by cycle 39.

## Where this follows the source and where it is its own

These parts follow the source description:

- The three kinds of added hardware: per-component power models, a per-domain strobe
  generator, and an aggregator that adds the model outputs.
- The inside of the power model: the previous/current queue, XOR, vector AND and sum.
- The list of components in the example: the `+` operand muxes, `+`, `>> 1`, `<`, `=`,
  `<=`, `+/-`, the constants 1 and −1, reg_mid, reg_c0, reg_c1, reg_first, reg_last and
  reg_out, an FSM, and the ports first, last, value, data, addr and out.
- Making the outputs of the aggregator and of the individual models observable.

These are this design's own choices:

- All widths.
- The FSM's states and schedule.
- Operand routing where the drawing leaves it open: which values feed `<`, `=` and
  `<=`, and what the muxes choose between. These follow from standard binary search.
- The memory's read latency.
- The name reg_c2. The drawing labels two registers reg_c1.
- Handling of the first sample after reset.
- The strobe period, `pe_clear` and `n_strobes`.
- The coefficient values, which are placeholders.

Known departures:

- The drawing routes register outputs over three shared buses. Here they are plain
  point-to-point nets, and buses get no power models of their own.
- The host-side software flow is not part of this RTL. That flow picks a macromodel for
  each component, generates the enhanced RTL, and synthesizes it for an FPGA. The
  enhanced RTL here was written by hand for this one example.
- The larger benchmark designs that the technique was evaluated on are not included.
  They are an MPEG-4 decoder and its IDCT, inverse quantiser and VLD blocks, a DCT, a
  peaking filter and a bubble sorter.

## Cost of the instrumentation

In coarse synthesis, the search circuit alone, datapath plus FSM, comes to 46 flip-flop
bits and about 50 word-level cells. The power hardware added to it comes to roughly 1200
flip-flop bits and about 240 cells:

- Each model keeps two copies of its bundle and a 14-bit output.
- The aggregator adds 100 bits of counters.

So the estimator is about 25 times larger than what it measures. The models dominate,
since every monitored bit is stored twice. This is the area overhead that limits the
technique on capacity-bound FPGAs. Sharing queues between components that watch the same
nets would be the first saving. The `+` mux and `+` adder models, for instance, watch the
same nets.

## Files

| file | contents |
|---|---|
| `rtl/pe_pkg.sv` | widths, state and control types, component bundles, model numbering, `pm_coeff` |
| `rtl/power_model.sv` | one macromodel evaluator (parameters N, CW, PW, COEFFS) |
| `rtl/power_strobe_gen.sv` | strobe generator for one clock domain |
| `rtl/power_aggregator.sv` | adder chain and total-power accumulator |
| `rtl/bs_datapath.sv`, `rtl/bs_controller.sv` | the binary-search circuit |
| `rtl/pe_binsearch_top.sv` | everything wired together; top of the design |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/sorted_mem.sv` | behavioural model of the searched memory (testbench only) |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself. Each also
has a watchdog that counts a failure if the test hangs. To build and run one:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/pe_pkg.sv \
          tb/tb_pe_binsearch_top.sv --top-module tb_pe_binsearch_top
./obj_dir/Vtb_pe_binsearch_top
```

Add `--assert` to also check the concurrent assertions. `bs_controller` has two: `done`
lasts one cycle, and a range is loaded only on `start` in IDLE. The top has one: all
models report in the same cycle.

For the other testbenches, substitute `tb_power_model`, `tb_power_strobe_gen`,
`tb_power_aggregator`, `tb_bs_datapath` or `tb_bs_controller`. Each takes well under a
second.

`tb_pe_binsearch_top` runs the top at its default parameters. It loads a 256-word
strictly increasing array and runs about 290 searches: directed cases, then random full,
partial, single-word and empty ranges, with keys both present and absent. For every
search it checks:

- the result, against its own binary search;
- the cycle count, against the formula above.

In parallel it rebuilds each model's bundle from the component signals. At every strobe
it recomputes the per-period power from the transitions and the coefficients. It then
checks:

- every `cycle_power` value and its cycle;
- `total_power` and `n_strobes` after each report.

The run passes through strobe periods 1, 3 and 5, a stretch with estimation disabled, and
a clear. It fails if any of these never happens: a found key, an absent key, an empty
range, a step right, a step left, each strobe period, the disabled stretch, the clear, or
a non-zero output from one of the 19 models.

## Changing it

- **Other coefficients.** Edit `pm_coeff` in `pe_pkg`. The testbench reads the same
  function, so it keeps checking the arithmetic, not the values.
- **Another memory size or data width.** Change `ADDR_W` or `DATA_W` in `pe_pkg`.
  `IDX_W` follows from `ADDR_W`. If any bundle grows past 40 bits, raise `MAXN`.
- **Another component.** Add its bundle to `dp_taps_t`, add an id to `pm_id_t` and its
  width to `PM_N`, raise `NUM_PM`, and connect its `pm_x` entry in `pe_binsearch_top`.
  The models and the aggregator are generated from these tables.
