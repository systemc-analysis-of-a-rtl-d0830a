# Hierarchical dynamic power management for a system on chip

A chip built from several IP cores wastes energy if every core runs at full
clock and voltage all the time. This design adds a small hardware power
manager next to each core and one global manager for the whole chip. Each
core's execution is cut into *tasks*; before each task the core asks its
local manager for permission. The local manager picks one of four speed/voltage
levels (or holds the core asleep) from three things: how urgent the task is,
how full the battery is, and how hot the chip is. Between tasks it guesses how
long the core will stay idle, and if that guess is long enough to pay for the
cost of sleeping and waking, it puts the core into a sleep state. The global
manager watches battery and temperature for the whole chip. It can block
low-priority cores and request a cooling fan.

The architecture is the one of M. Conti, "SystemC Analysis of a New Dynamic
Power Management Architecture". That paper describes it at the level of
algorithms and evaluates it in SystemC. The SystemVerilog here is a
synthesizable implementation of it. The structure, the state set, the
state-selection rules and the global enable rule follow the paper. All widths,
delays, energies, thresholds, the handshakes and the idle predictor were
chosen for this implementation, because the paper gives none of them.
Section "Where this departs from or adds to the paper" lists each of these
choices.

## Structure

```
             battery class   temperature class
                    \             /
                     +---- gem ---+----> fan_on
                     |  (one)     |
        enable, other IPs' energy |  request, own energy estimate
                     v            ^
   +-----------------+------------+-----------------+   one per IP
   |  IP --task_req/prio/len--> lem --target--> psm  |
   |  IP <------- task_grant --- lem <--state/energy-- psm |
   |  IP <------------ run_en (clock enable) ------- psm |
   |  IP --task_done--> lem        IP --itype--> psm  |
   +---------------------------------------------------+
```

| File | Module | Role |
|---|---|---|
| `rtl/dpm_pkg.sv` | package | class and state encodings, the state-selection rule table |
| `rtl/gem.sv` | `gem` | global energy manager (one per chip) |
| `rtl/lem.sv` | `lem` | local energy manager (one per IP) |
| `rtl/psm.sv` | `psm` | power state machine (one per IP) |
| `rtl/dpm_soc.sv` | `dpm_soc` | top: one `gem`, `N_IP` x (`lem` + `psm`) |

The functional IPs are outside the design. The paper treats them as black
boxes. So are the battery gauge, the temperature sensor, the on-chip bus and
the fan. Their signals are ports of `dpm_soc`. Battery and temperature reach
the top already coded in classes.

## Encodings (`dpm_pkg`)

| Quantity | Classes | Type |
|---|---|---|
| task priority | Low, Medium, High, Very high | `prio_t`, 2 bits |
| battery | Empty, Low, Medium, High, Full, external supply | `bat_t`, 3 bits |
| temperature | Low, Medium, High | `temp_t`, 2 bits |
| power state | ON1..ON4, SL1..SL4, OFF | `pstate_t`, 4 bits (codes 0..8) |

ON1 is full speed. ON2 to ON4 run slower, at a lower voltage. SL1 is the
lightest sleep and wakes fastest. SL4 is the deepest sleep, and OFF is soft
off. The states follow the ACPI style.

## Choosing the power state for a task

This is the core of the design: `dpm_pkg::select_state`. The rows are tested
top to bottom and the first match wins. "-" matches any value.

| # | Priority | Battery | Temperature | State |
|---|---|---|---|---|
| 1 | V | E | - | ON4 |
| 2 | V | - | H | ON4 |
| 3 | H, M, L | E | - | SL1 |
| 4 | H, M, L | - | H | SL1 |
| 5 | - | L | M, L | ON4 |
| 6 | - | E | M | ON4 |
| 7 | V | M, H | L | ON1 |
| 8 | H | M, H | L | ON2 |
| 9 | M | M, H | L | ON3 |
| 10 | L | M, H | L | ON4 |
| 11 | V, H, M | F | L | ON1 |
| 12 | L | F | L | ON2 |
| 13 | - | supply | M, L | ON1 |
| - | otherwise | | | ON4 |

Read it like this:
* An urgent task always runs, slowly if resources are short (rows 1–2).
* Any other task waits in SL1 while the battery is empty or the chip is hot
  (rows 3–4).
* A low battery means slow execution for everyone (row 5).
* With a healthy battery and a cool chip, the speed follows the priority
  (rows 7–12).
* On external power, everything runs at full speed unless the chip is hot
  (row 13).

Two facts about the published table matter here:
* Row 6 conflicts with row 3 for non-urgent tasks. First-match order resolves
  this in favour of row 3, so row 6 never fires.
* No row covers a Medium, High or Full battery at Medium temperature. Those
  cases get the default, ON4.

The local manager does not feed the present battery and temperature classes
into the table. It feeds its *estimate of them at the end of the task*. See
the next section.

## Local energy manager (`lem`)

The LEM is a five-state controller: IDLE, SLEEP, REQ, WAKE and RUN.

1. **Request.** The IP raises `task_req` with `task_prio` and `task_len`
   (instructions) and holds them until `task_grant`. The LEM latches them and
   moves to REQ. It raises `gem_req` and offers the GEM an energy estimate,
   `gem_energy = task_len * E_INSTR`.
2. **Estimate.** The LEM adds its own estimate to `others_energy`, which is
   the energy the GEM reports for all other IPs' current tasks.
   * If the sum reaches `BAT_STEP`, the battery class used by the table
     drops by one.
   * If the sum reaches `TEMP_STEP`, the temperature class rises by one.
3. **Decide.** The LEM evaluates this every cycle while in REQ:
   * If the GEM does not enable the IP, the target is SL1 and the request
     waits.
   * If the table gives SL1, the result is the same.
   * Otherwise the LEM sets the chosen ON state on the PSM and moves to WAKE.
4. **Grant.** When the PSM reports the target state with no transition in
   progress, the LEM pulses `task_grant` (registered) and enters RUN.
5. **Measure.** In RUN the LEM adds up the PSM's `energy` output each cycle,
   up to and including the cycle in which `task_done` is sampled. The total
   appears on `task_energy`, with `task_energy_vld` for one cycle.
6. **Idle and sleep.** After a task the IP stays in its ON state, and the LEM
   counts idle cycles. After `IDLE_TIMEOUT` cycles it compares the prediction
   `idle_pred` with the break-even times `BREAK_EVEN` of SL1, SL2, SL3, SL4
   and OFF. It sets the deepest state whose break-even time the prediction
   reaches. If none qualifies, the IP stays on. The next request ends the idle
   period, and the prediction becomes `(idle_pred + idle period) / 2`.
   If the GEM withdraws the enable while the IP idles in an ON state, the LEM
   sends it to SL1 at once. A task that is already running is allowed to
   finish.

### Break-even times

The break-even time of a sleep state is the shortest idle period for which
sleeping costs less energy than staying on. It is what makes the manager
weigh the delay and energy cost of a transition. The defaults come from the
PSM's default transition costs:

* A round trip into state s and back lasts T = `ENTER_LAT` + `WAKE_LAT[s]`
  cycles, at transition power Pt = 64.
* The alternative is to stay in the slowest ON state, at power Pon = 23.
* Sleeping then pays off from an idle period of T + T·(Pt − Pon)/(Pon − Ps),
  where Ps is the sleep state's power.

For SL1, SL2, SL3, SL4 and OFF this gives 23, 57, 195, 739 and 2855 cycles.
If you change the PSM's delays or energies, recompute these.

`USE_GEM = 0` gives a stand-alone LEM that ignores `gem_en`. The paper allows
a chip without a GEM.

Latency from the request to the grant:
* Best case, no state change: 3 cycles (latch, decide, grant).
* With a state change, add the PSM transition delay.

## Power state machine (`psm`)

When `target` differs from `state` and no transition is running, the PSM
raises `busy` for the length of the transition, then takes the new state.

Transition delays:

| Transition | Default delay (cycles) |
|---|---|
| ON to another ON state (voltage/frequency change) | `VS_LAT` = 8 |
| SL1, SL2, SL3, SL4 or OFF to an ON state | `WAKE_LAT` = 4, 16, 64, 256, 1024 |
| any state to a sleep state or OFF | `ENTER_LAT` = 2 |

Outputs:
* `run_en`: the IP's clock enable. In ONk it is high one cycle in
  `CLK_DIV[k]` (1, 2, 3, 4). It is never high while `busy` or when not in an
  ON state.
* `clk_div`, `vdd_sel`: the operating point, for an external clock generator
  and regulator.
* `energy`: the characterised energy of the present cycle, for the type of
  instruction the IP reports on `itype`. It comes from
  `ENERGY[itype][state]`, or is `TRANS_ENERGY` during a transition.

Default energies per cycle, for two instruction types:

| State | Type 0 | Type 1 |
|---|---|---|
| ON1 | 256 | 154 |
| ON2 | 82 | 49 |
| ON3 | 42 | 25 |
| ON4 | 23 | 14 |
| SL1 | 8 | 8 |
| SL2 | 4 | 4 |
| SL3 | 2 | 2 |
| SL4 | 1 | 1 |
| OFF | 0 | 0 |

Type 0 follows f·V² with V = 1, 0.8, 0.7 and 0.6. In the ON states, type 1
draws 60% of type 0's energy. Replace the energies
with real characterisation data for a real IP. Reset puts the PSM in OFF.

## Global energy manager (`gem`)

The GEM has registered outputs, so it reacts one cycle after its inputs
change.

| Temperature | Battery | Enabled IPs | Fan |
|---|---|---|---|
| Low or Medium | Medium, High, Full or external supply | all | off |
| Low or Medium | Empty or Low | IPs with static priority `IP_PRIO <= HIGH_PRIO_MAX` (default 2) | off |
| High | any | none | on |

`others_energy[i]` is the saturating sum of `req_energy[j]` for all j ≠ i. A
LEM drives its estimate from request until task end, and zero otherwise. An
assertion checks that a requesting LEM never offers zero energy.

A direct consequence of the rule: while the battery stays Low, IPs with static
priority 3 and 4 never run. Their requests wait in SL1 until the battery class
improves.

## Where this departs from or adds to the paper

* **Numbers** are all this implementation's own. The paper gives none. This
  covers widths, delays, clock divisions, energies, break-even times (though
  these are derived from the delays and energies),
  `IDLE_TIMEOUT`, `E_INSTR`, `BAT_STEP`, `TEMP_STEP` and
  `HIGH_PRIO_MAX`.
* **Rule table.** It uses first-match order. Row 6 is shadowed, and ON4 is
  the default for the uncovered Medium-temperature cases. See above.
* **Battery classes.** The paper has five, and its table also uses an
  "external power supply" entry, so a sixth code was added. The GEM treats it
  like Full.
* **End-of-task estimate.** The one-class shift is an assumed model. The
  paper only says that the LEM estimates both classes.
* **Idle predictor.** The averaging predictor is an assumed choice. The paper
  only says that the LEM predicts idle time and compares it with break-even
  times.
* **Instruction types.** The paper ties energy to each state *and type of
  instruction*. Two types are modelled here; the number of types and their
  energies are assumed. The LEM's up-front estimate uses type 0, the worst
  case.
* **Bus occupation.** The paper names it as a resource, but no GEM rule uses
  it, so it is not used here. The paper also says the GEM weighs the requests
  of all IPs. Its stated algorithm does not use them for the enable, so here
  they only feed the `others_energy` sums.
* **Handshakes** are this design's own. This covers request/grant/done, the
  LEM to GEM request, and the LEM to PSM target/busy.

## Verification

Each testbench checks the design against values worked out independently. Each
prints `TB_RESULT checks=N failures=M`.

| Testbench | What it covers |
|---|---|
| `tb/tb_gem.sv` | every battery × temperature pair, random and saturating energies |
| `tb/tb_psm.sv` | transition delay of every kind of transition, final state, energy, `run_en` rate in each ON state |
| `tb/tb_lem.sv` | all 72 priority × battery × temperature combinations against a separately written rule list; SL1 hold and release; GEM disable; estimate shifts; idle prediction and sleep choice; measured task energy |
| `tb/tb_dpm_soc.sv` | whole chip, default parameters (details below) |
| `tb/tb_workloads.sv` | the paper's six evaluation scenarios (details below) |

### Whole-chip test (`tb_dpm_soc.sv`)

Four traffic-generating IPs (`tb/ip_traffic_gen.sv`) run while the battery
and temperature classes step through Full, Medium, Low, Empty, hot and
external supply. Two IPs are busy and two mostly idle. IP1 also issues tasks
of up to 2400 instructions, long enough for the end-to-end estimate to shift a
class. Each task's instructions are of one random type. The test checks the following on every cycle:
* GEM enables and the fan request;
* `run_en` rate and legality;
* grants only in ON states and never to a long-disabled IP;
* each task's energy.

The test also counts each mechanism and fails if one never occurs:
* every ON state used;
* ON-to-ON changes;
* SL1 forced by the GEM and SL1 from the table;
* sleep on prediction and wake from a deep state;
* the fan;
* the end-of-task estimate changing a choice.

### Workload scenarios (`tb_workloads.sv`)

This runs A1–A4 (one LEM, PSM and IP without a GEM; battery Full or Low;
temperature starting Low or High) and B, C (the whole chip, battery Low, with
busy and idle IPs swapped between the two). A first-order thermal model in the
testbench provides the temperature class. The baseline is full speed with no
sleep.

One run printed the following. The published SystemC figures are in
parentheses.

| | energy saving % | temperature reduction % | delay overhead % |
|---|---|---|---|
| A1 | 84.1 (39) | 87.6 (31) | 189 (30) |
| A2 | 89.5 (55) | 93.4 (21) | 452 (339) |
| A3 | 84.5 (39) | 85.8 (18) | 204 (37) |
| A4 | 90.6 (55) | 92.4 (18) | 475 (339) |
| B | 94.9 (65) | 94.9 (19) | 319 (242) |
| C | 97.2 (64) | 97.1 (18) | 547 (253) |

The trends match: a low battery saves more energy at much higher delay. The
absolute values do not match. They depend entirely on the assumed energy
table, the thermal model and the task mix, none of which the paper gives. The
test checks only the trends.

In B and C, IPs 3 and 4 never run, because of the GEM rule above. So the B
and C energy figures are for the whole chip over the time IPs 1 and 2 need,
and the delay figures are for IPs 1 and 2 only.

## Simulating

The testbenches use `--timing` and two-state simulation. All state that is
read is reset or initialised. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/dpm_pkg.sv rtl/gem.sv rtl/lem.sv rtl/psm.sv rtl/dpm_soc.sv \
  tb/ip_traffic_gen.sv tb/tb_dpm_soc.sv --top tb_dpm_soc -o sim
./obj_dir/sim
```

For the unit tests, substitute `tb_gem`, `tb_psm` or `tb_lem`. Only the
package and that block's file are needed. For the scenario runs, use
`tb_workloads` with the same file list as `tb_dpm_soc`. Each run takes well
under a second.

## Changing it

* **Number of IPs and their priorities.** Set `N_IP` and `IP_PRIO` on
  `dpm_soc`.
* **Rule table.** It is the single function `select_state` in `dpm_pkg`.
* **Timing and energy per IP.** These are parameters of `lem` (estimate
  steps, idle timeout, break-even times) and `psm` (delays, clock division,
  energies). `dpm_soc` passes only the widths, so per-IP values mean editing
  the defaults or adding pass-through parameters.
* **Classes.** Battery and temperature classes are inputs, so any gauge or
  sensor that can produce the classes can drive them.
