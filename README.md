# SafeLS: a staggered core-level lockstep wrapper

Two identical cores that run the same program and are compared can detect a
random hardware fault, but only if the fault makes them err *differently*. A
disturbance on the clock or supply reaches both copies at once. If the two
copies are in the same electrical state at that moment, it can corrupt both in
the same way, and the comparison misses it. This is a *common-cause failure*.
Lockstep cores avoid it with time diversity. One core runs a few cycles behind
the other, so the two never hold the same state in the same cycle, and a fault
that strikes both corrupts different states.

SafeLS applies this to a whole processor core (a Gaisler NOEL-V RISC-V core in
the original work). The redundancy boundary is the core's ports:

```
 SoC inputs ─┬──────────────────────────────► leading core ──► [delay D] ──┐
 (data, irq) │                                                              ▼
             └──► [delay D] ──► trailing core ────────────────────────────► =? ──► error interrupt
                                                                            │
 SoC outputs ◄──────────────────────── one copy: the delayed leading outcomes
```

* The **leading core** gets every input in the cycle the SoC drives it.
* The **trailing core** gets the same inputs **D cycles later**. D is
  programmable (1 to 3 here; 2 or 3 are the usual settings).
* The leading core's **outcomes** (output data, interrupts it raises,
  exceptions) are delayed by the same D cycles. In every cycle the comparator
  then sees both cores' outcomes for the same *logical* cycle.
* The SoC receives the outcomes **once**. To the rest of the chip a SafeLS
  looks like one core.
* Any difference raises an **error interrupt**. With two copies nobody can
  tell which one is wrong (possibly both are), so the wrapper does not try to
  correct anything. Software or a system-level safety manager handles the
  error, for example by re-running the job.

This gives up detection in the same cycle, and only on purpose. The target
systems accept that a job fails, as long as the failure is detected by the
time the job ends. In return, the core itself stays untouched: nothing inside
the pipeline is duplicated or changed.

## Files

| file | contents |
|---|---|
| `rtl/safels_pkg.sv` | the core-port bundle types `core_in_t`, `core_out_t` and the default delays |
| `rtl/stagger_delay.sv` | programmable delay line (register chain with a selectable tap) |
| `rtl/lockstep_comparator.sv` | the `=?` stage: per-cycle comparison, sticky error interrupt |
| `rtl/safels.sv` | the wrapper (top): three delay lines, delay register, comparator |
| `tb/noelv_core_model.sv` | behavioural stand-in for a core, simulation only |
| `tb/tb_stagger_delay.sv`, `tb/tb_lockstep_comparator.sv`, `tb/tb_safels.sv` | self-checking testbenches |

The cores are **not** in `safels`. Their ports come out of the wrapper as
`lead_*` and `trail_*`, and the two core instances are connected beside it, in
the next level of the hierarchy up. The core is vendor IP, and keeping it
outside lets the same wrapper serve any core whose port set fits in the two
bundle types.

## Keeping the two cores aligned

The whole scheme rests on one invariant:

> In every cycle in which the comparison is enabled, the leading core's
> outcome at the comparator and the trailing core's outcome belong to the same
> logical cycle.

Three delay lines of the same length D keep it. All three are driven by one
register, `delay_q`:

| delay line | input | output goes to |
|---|---|---|
| `u_in_delay`  | `soc_in_i` | `trail_in_o` |
| `u_rst_delay` | `rst_ni` (reset value 0) | `trail_rst_no` |
| `u_out_delay` | `lead_out_i` | comparator, and `soc_out_o` |

**Reset.** Reset counts as one more input. The leading core leaves reset in
the cycle `rst_ni` rises. The trailing core leaves it exactly D cycles later,
because its reset travels down a chain that was loaded with "in reset". The
delayed reset also **enables the comparator**. While the chains fill, the
output delay line still holds its reset zeros and the trailing core still
shows its reset outcomes, and these two must not be compared. From the cycle
`trail_rst_no` rises, the comparator sees the leading core's first outcome
after reset (delayed by D) next to the trailing core's first outcome after
reset, and alignment holds from then on.

Example with D = 2. `Lk` is the leading core's outcome in its k-th cycle out of
reset, `Tk` the trailing core's:

| cycle after reset release | 0 | 1 | 2 | 3 | 4 |
|---|---|---|---|---|---|
| leading core outcome         | L0 | L1 | L2 | L3 | L4 |
| delayed leading (`soc_out_o`) | 0 | 0 | L0 | L1 | L2 |
| `trail_rst_no`               | 0 | 0 | 1 | 1 | 1 |
| trailing core outcome        | reset | reset | T0 | T1 | T2 |
| compared                     | no | no | L0=T0? | L1=T1? | L2=T2? |

**Programming D.** `delay_cfg_i` is sampled only while `rst_ni` is low, and
the value is held after that. Changing D while the cores run would shift one
path against the other and break the invariant at once. A setting outside
1..`MAX_DELAY` (only 0 when `MAX_DELAY` is 3) selects D = 2. Typically a
configuration register of the SoC drives `delay_cfg_i`.

**The SoC's view.** Every outcome reaches the SoC D cycles after the leading
core produced it, while inputs reach the leading core at once. From the SoC
the wrapper therefore looks like a core with D extra cycles of output latency.
The bus interface of the wrapped core, and the fabric it sits on, must accept
that added latency. This wrapper does not change any protocol to hide it.

## Error detection

`lockstep_comparator` compares the whole outcome bundle (72 bits by default)
with a single equality test, in every enabled cycle.

* `mismatch_o` is the raw, unregistered result of that cycle.
* `err_irq_o` is registered. It rises in the cycle after a mismatch and stays
  high until `err_clear_i` is seen in a cycle with no new mismatch. If a
  mismatch arrives in the same cycle as the clear, the mismatch wins.

Latency, counted from the clock edge at which a wrong value first sits on a
core's outputs:

| where the error appears | `err_irq_o` high after |
|---|---|
| trailing core's outputs | 1 cycle |
| leading core's outputs  | D + 1 cycles (D of them in the output delay line) |

A transient error, one that affects outcomes for a few cycles only, leaves the
pair aligned. The interrupt can then be cleared and execution goes on. An
error that corrupts a core's state makes the pair diverge for good. The
mismatches keep coming, so a clear does not stick, and the pair has to be
reset together to get back into lockstep. Deciding on that is up to the
system; the wrapper only reports.

**Common-cause faults.** Suppose the same upset flips the same state bit in
both cores in the same cycle. The two cores are D logical cycles apart, so the
bit is flipped at two different points of the program. The trailing
core is hit at an earlier logical cycle, one that the leading core has already
passed through correctly. The first wrong trailing outcome is therefore
compared with a correct leading one, and the error is flagged one cycle later. The testbench injects exactly
this fault for every D and sees it detected each time.

**Outcomes during an error.** The SoC always receives the delayed leading
core's outcomes, including in a cycle that mismatches. Nothing is blocked or
replaced. The interrupt is the only reaction. See the departures below.

## Interface of `safels`

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i` | in | 1 | clock, shared with both cores |
| `rst_ni` | in | 1 | synchronous active-low reset of the wrapper and of the leading core |
| `delay_cfg_i` | in | 2 | staggering delay D, sampled during reset |
| `err_clear_i` | in | 1 | clears `err_irq_o` |
| `soc_in_i` | in | `core_in_t` (68) | inputs for the one visible core |
| `soc_out_o` | out | `core_out_t` (72) | outcomes of the one visible core |
| `err_irq_o` | out | 1 | lockstep error interrupt (sticky level) |
| `mismatch_o` | out | 1 | per-cycle comparison result |
| `lead_rst_no`, `lead_in_o`, `lead_out_i` | out/out/in | 1/68/72 | leading core connection |
| `trail_rst_no`, `trail_in_o`, `trail_out_i` | out/out/in | 1/68/72 | trailing core connection |

`core_in_t` is `{irq[3:0], data[63:0]}`. `core_out_t` is `{exc[3:0],
irq[3:0], data[63:0]}`. To wrap a real core, put its complete input port set
in `core_in_t` and its complete output port set in `core_out_t`, in
`rtl/safels_pkg.sv`. Nothing else has to change: the wrapper relies only on
the `$bits` of the two types. Every signal that leaves the core must be in
`core_out_t`, or a fault on it will not be detected.

Parameter: `MAX_DELAY` (default 3) sets the length of the three register
chains and the width of `delay_cfg_i` (`$clog2(MAX_DELAY+1)` bits). At the
default size the wrapper holds 3 × (68 + 72 + 1) flip-flops in the chains,
2 bits of `delay_q` and 1 error bit.

## What follows the original design, and what is this implementation's own

These points follow the published SafeLS:

* The redundancy boundary is the core's ports.
* All core inputs are replicated, undelayed to one core and delayed to the
  other.
* The delay is programmable, typically 2 or 3 cycles.
* The first core's outcomes are delayed by the same amount.
* The outcomes are compared.
* The SoC sees one copy.
* A discrepancy raises an interrupt.
* Figure-level structure: register chains on the two delayed paths and an
  equality comparator.

These are this implementation's own choices:

* The maximum delay of 3.
* The bundle contents and widths: 64-bit data, 4 interrupt lines each way,
  4 exception bits.
* Synchronous active-low reset.
* The trailing core's reset is delayed like any other input, and the delayed
  reset enables the comparator.
* D is sampled during reset, and out-of-range values fall back to 2.
* The interrupt is a sticky level with an explicit clear, and there is a
  separate unregistered mismatch flag.
* Outcomes are delivered even in a mismatching cycle. The description of the
  scheme says outcomes are delivered when no discrepancy is found, and that a
  discrepancy raises an interrupt. This wrapper implements the interrupt and
  does not block delivery. A wrapper that must block delivery can gate
  `soc_out_o` with `mismatch_o`, at the cost of a combinational path through
  the comparator.

The following are **not included**:

* The NOEL-V cores themselves.
* The SoC a SafeLS is meant to sit in: AHB bus, shared L2 cache, AXI
  interconnect, accelerators, I/O bridge, memory controller and DRAM. In the
  reference SoC, two SafeLS units sit on the AHB bus next to two ordinary
  cores. Each one takes the place of a single core's bus port.
* A variant that keeps the first-level caches outside the redundancy boundary
  (shared by both cores, protected by parity). It is only a plan in the
  original work.

## Verification

Each testbench checks its results against values it works out on its own,
counts checks and failures, and has a watchdog. Each ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_stagger_delay`: two sizes (MAX 3 and MAX 6, with a non-zero reset
  value), every delay setting, 200 random words per setting, and a reset in
  the middle of the stream. Against a history of past inputs.
* `tb_lockstep_comparator`: a difference in every single bit position, the
  disabled comparison, stickiness, the clear, and a mismatch in the same cycle
  as the clear. Then 3000 random cycles against a reference model.
* `tb_safels`: the wrapper at its default parameters with two behavioural
  cores attached. It runs for D = 1, 2, 3 and for the out-of-range setting 0.
  After every edge it checks that:
  * the leading core gets its inputs at once;
  * the trailing core gets its inputs and reset D cycles later;
  * the SoC gets the leading outcomes D cycles later, equal to an independent
    reference core;
  * no error is flagged while both cores are fault free.

  For each D it also injects five faults and checks the latency of each
  detection against the table above: a transient on the trailing core's
  outputs, a transient on the leading core's outputs, a state upset in the
  leading core, a state upset in the trailing core, and the same upset in
  both cores at once. After the transients it clears the interrupt; after the
  state upsets it resynchronises the pair by reset. It counts each mechanism
  and fails if one never happened.

The behavioural core in `tb/noelv_core_model.sv` is a 64-bit state machine:
`state' = (rotl7(state) + data) ^ irq`, with the outcomes computed from the
state. It is deterministic, as lockstep requires, and it has fault-injection
inputs for state bits and for output bits. It models no real core.

To simulate with Verilator 5 (for example the full wrapper test):

```
verilator --binary --timing --assert --top-module tb_safels \
    rtl/safels_pkg.sv rtl/stagger_delay.sv rtl/lockstep_comparator.sv rtl/safels.sv \
    tb/noelv_core_model.sv tb/tb_safels.sv
./obj_dir/Vtb_safels
```

For the unit tests, use `rtl/safels_pkg.sv`, the unit's file and its
testbench, with `--top-module tb_stagger_delay` or
`--top-module tb_lockstep_comparator`. To lint, list the package first:
`verilator --lint-only -Wall rtl/safels_pkg.sv rtl/stagger_delay.sv
rtl/lockstep_comparator.sv rtl/safels.sv --top-module safels`. This runs
without warnings.
