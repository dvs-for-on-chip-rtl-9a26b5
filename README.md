# A voltage-scaled on-chip read bus that corrects its own timing errors

A long on-chip bus is normally sized so that every word arrives in time under the
worst conditions at once. Those conditions are the slow process corner, a hot die,
a sagging supply, and both neighbouring wires switching the opposite way. Most of the
time none of these hold, so most cycles leave a large part of the clock period unused.

This design spends that slack by lowering the bus supply. It goes on lowering it until
a few words really do arrive late. Those late words are not lost:

- A double sampling flop at the receiver captures each bit twice: once on the clock
  edge, and again a fixed time later on a delayed clock.
- If the two samples differ, the second, later sample is the correct one.
- The receiver puts that sample back into the flop one cycle late. Nothing is sent
  again.
- The sender is told to hold its next word for one cycle. The wrong word that has
  already gone to the next stage is thrown away.
- A late arrival therefore costs one cycle, no more.

Because errors are counted, the supply can be controlled by the error rate itself. The
count over each window of 10,000 cycles sets the supply for what comes next:

| Errors in the window | Supply request |
|---|---|
| under 1 % | 20 mV lower |
| over 2 % | 20 mV higher |
| 1–2 % | held |

The regulator applies each request 3,000 cycles (2 µs at 1.5 GHz) later. The supply
never goes above the nominal 1.2 V. It never goes below a minimum set per process
corner: the lowest voltage at which the delayed sample is still always right.

The point of the design is that the supply tracks what is happening now: the corner,
the temperature, the IR drop, and how much the program's data toggles. There is no
fixed worst-case margin.

The reference system is:

- a 6 mm, 32-bit memory read bus in a 0.13 µm process at 1.5 GHz (666 ps cycle);
- a repeater every 1.5 mm and a grounded shield wire after every four signal wires;
- repeaters sized so the slowest transition takes 600 ps under the worst conditions.

```
 memory ──tx_data──► launch_reg ──► dvs_read_bus ──► dsff_bank ──► load_stage ──► core
            ◄─tx_ready─┘   ▲            ▲ vdd          │ q,q_valid    ▲ flush
                           └── stall ───┼──────────────┤ error ───────┘
                                        │              ▼
                                  supply_delay ◄── voltage_controller ◄── error_counter
```

## The double sampling flop (`dsff`)

Each bit has two storage elements:

- The main flop is clocked by `clk`.
- The shadow sample is taken from the same input `d` on `clk_del`, which is `clk`
  delayed by up to a third of a cycle. The testbenches use 220 ps.

Between `clk_del` and the next `clk`, both hold the value the bus had at their own
sampling instant. If the bus was still moving at the `clk` edge, the two differ, and the
local error output is `error_l = chk_en & (q ^ shadow)`.

An input mux in front of the main flop selects `shadow` instead of `d` when `restore`
is high. This is how the correct value is put back at the next edge.

The shadow sample is only correct if two conditions hold:

- **Setup.** The slowest transition must arrive before `clk_del`. This sets the lowest
  usable supply at each corner.
- **Hold.** The fastest transition of the next word must not arrive before `clk_del`
  of the current cycle. This is why the clock delay cannot be made arbitrarily large.

The bus model below keeps its shortest delay at or above 297 ps, against the 220 ps
clock delay.

## Recovering from an error (`dsff_bank`, `launch_reg`, `load_stage`)

This is the part that needs the most care. The per-bit errors of the 32 cells are ORed
into one `error` per cycle. That signal goes to three places:

- the error counter;
- the `restore` input of **every** cell;
- `stall` to the launch register and `flush` to the load stage.

Take word *n* captured at edge *k* with at least one bit late. Word *n+1* is launched
at the same edge.

| When | What happens |
|---|---|
| cycle *k* (after `clk_del`) | `q` holds a partly wrong copy of word *n*, the shadows hold the right one. `error = 1`, so `q_valid = 0` and the load stage discards what it would have taken. `stall = 1`, so `tx_ready = 0` and the launch register keeps word *n+1* on the bus for another cycle. |
| edge *k+1* | Every cell loads its shadow. Cells without an error reload the value they already had. `q` = word *n*, now correct. The launch register holds word *n+1*. |
| cycle *k+1* | The recovery cycle. The compare is masked (`chk_en = 0`) because `q` still holds word *n* while the shadow has sampled word *n+1*. `q_valid = 1`, and word *n* goes to the load stage at edge *k+2*. |
| edge *k+2* | `q` = word *n+1*. It has been on the wires for two cycles, so it is certainly settled. The launch register moves on to word *n+2*. |

Each error costs exactly one cycle and no word is sent twice. The load stage receives
every word once and in order. Two errors can never happen in consecutive cycles. This
is stated as an assertion in `dsff_bank`.

The bank also handles reset:

- The compare is enabled only after the first clock edge after reset.
- `q_valid` rises one edge later still, when the first word launched after reset has
  been captured.
- So neither the random contents at power-up nor the bus's reset value is delivered.

`load_stage` is the first register of the memory unit. It takes a word whenever
`q_valid` is high and counts the flushed cycles (`flush_cnt`). `launch_reg` is the
output register on the memory side. It presents a new word whenever `tx_ready` is high
and holds it when stalled.

## Measuring the error rate and choosing the supply (`error_counter`, `voltage_controller`, `supply_delay`)

`error_counter` counts cycles and error cycles. On the last cycle of each
`WINDOW`-cycle window (10,000 by default) it outputs the window's total in `err_sum`.
That total includes the error of the last cycle itself. `sum_valid` pulses for one
cycle, and both counts start again from zero with no gap between windows. The count
needs 14 bits (the ceiling of log2 of 10,001).

`voltage_controller` compares the total with 1 % and 2 % of the window: 100 and 200
errors at the default. It registers one of `DV_DOWN`, `DV_UP` or `DV_HOLD` together
with `dv_valid`, one cycle after `sum_valid`. Exactly 1 % or exactly 2 % counts as
*hold*.

`supply_delay` models the regulator's response time as a delay:

- A non-hold request starts a timer. The 20 mV step is applied `SETTLE` cycles after
  `dv_valid` (3,000 by default).
- It is clamped at `vmin_mv` and at 1200 mV.
- `pending` is high while a step is waiting.
- The supply starts at 1200 mV after reset.

Since a window is 10,000 cycles, a step always lands inside the next window. The loop
therefore makes at most one 20 mV change per window.

Overall timing: if window *W* ends at edge *E*, the new `vdd_mv` is seen from edge
*E + 2 + SETTLE*. At the defaults that is 3,002 cycles after the window end. The supply is an
11-bit millivolt code (`dvs_pkg::mv_t`).

## The bus model (`dvs_read_bus`)

The bus is wires and repeaters, so it is a behavioural model and is not synthesizable.
Its job is to turn each transition of each wire into an arrival time. That delay
depends on three things.

**Neighbours.** Each of a wire's two neighbours adds a coupling load:

| Neighbour | Load added |
|---|---|
| switching the same way | 0 Cc |
| quiet, or a shield | 1 Cc |
| switching the opposite way | 2 Cc |

The worst case is therefore Cg + 4 Cc, with both neighbours opposite. The wires next to
a shield can never be worse than Cg + 3 Cc.

**Supply.** The delay scales as s(V) = V / (V − 300 mV)^1.3. V is the effective
voltage, `vdd_mv` less the IR drop given in `ir_drop_pct`.

**Corner.** A single delay scale, `corner_pct`, stands for process and temperature.
100 is the slow process at 100 °C.

The full formula:

```
delay = 600 ps · corner/100 · s(V)/s(1080 mV) · (0.4 + 0.6 · (1 + 0.5·m)/3) + 65 ps
```

Here *m* is the coupling count (0 … 4). 0.4 of the wire delay sits in the repeaters,
where the neighbours have no effect. The 65 ps stands for the flop's setup time and
clock skew: the repeaters were sized to leave 10 % of the cycle for these.

This gives 665 ps in the worst case at 1.2 V with 10 % IR drop at the slow corner, just
inside the cycle. Other values from the model:

| Case | Delay |
|---|---|
| slow corner, fastest pattern | 425 ps |
| slow corner, no IR drop | 618 ps |
| slow corner, 1.0 V with 10 % IR drop | 768 ps |

Each transition is scheduled on its own, as a transport delay. A transition that would
land after a newer one on the same wire is dropped, so the far end always settles on
the last value sent.

The constants are this model's own, because the delay tables of the original study are
not available:

- Vt = 300 mV;
- α = 1.3;
- Cc/Cg = 0.5;
- the 0.4 repeater share;
- the corner scales.

Only these follow the original description: the 600 ps worst case and its conditions,
the coupling rule, the shield spacing and the 10 % slack.

Minimum supplies used with this model:

| Corner | `vmin_mv` |
|---|---|
| slow, 100 °C, 10 % IR drop | 880 mV |
| typical (`corner_pct` = 92), 100 °C | 800 mV |

Each is the lowest supply at which the worst pattern still arrives before `clk_del`.
The typical minimum is chosen so the condition still holds with 10 % IR drop.

## Files

| File | Contents |
|---|---|
| `rtl/dvs_pkg.sv` | shared constants (bus width, shield spacing, 1200 mV, 20 mV, window 10,000, 1 %/2 %, 3,000-cycle delay), `mv_t`, `dv_e` |
| `rtl/dsff.sv` | one double sampling flop |
| `rtl/dsff_bank.sv` | 32 cells, error OR, recovery control |
| `rtl/launch_reg.sv` | memory-side register with stall |
| `rtl/dvs_read_bus.sv` | behavioural bus model |
| `rtl/load_stage.sv` | receiving register with flush and flush counter |
| `rtl/error_counter.sv` | windowed error counter |
| `rtl/voltage_controller.sv` | 1 % / 2 % decision |
| `rtl/supply_delay.sv` | regulator response delay and supply limits |
| `rtl/dvs_bus_top.sv` | everything wired together |

The top's ports:

- `clk`, `clk_del` and `rst_n` (asynchronous, active low);
- the memory side, `tx_data` and `tx_ready`;
- the core side, `rx_data` and `rx_valid`;
- `vmin_mv`;
- the corner inputs `corner_pct` and `ir_drop_pct`, which only the bus model reads;
- observation outputs: `vdd_mv`, `error`, `err_sum`/`err_sum_valid`, `flush_cnt` and
  `supply_pending`.

The delay line that makes `clk_del` and the regulator's analog circuit are not
included. The memory is not included either: the testbench plays its part.

## How it was checked

Every block has a self-checking testbench that compares against values worked out
independently of the block:

| Testbench | What it checks |
|---|---|
| `tb_dsff` | on-time, late (with the input changing again before the restoring edge) and masked cases |
| `tb_dsff_bank` | a sender with deliberately late bit patterns and its own error predictor. It checks every word and every error. The cycle count must equal words + errors + 2 (pipeline fill). |
| `tb_error_counter`, `tb_voltage_controller`, `tb_supply_delay` | run at the default window and delay, with the thresholds at the exact boundary values and the clamps at both ends |
| `tb_load_stage` | random valid and flush traffic |
| `tb_dvs_read_bus` | measured arrival times for each coupling pattern, next to a shield, without IR drop, at 1.0 V and at another corner, against the formula |
| `tb_read_bus_modified` | the bus model with a coupling ratio 1.95 times larger (`CC_CG` = 0.975). The worst case stays at 665 ps; the fastest pattern drops from 425 ps to 378 ps. |

The whole design is run by a shared environment (`tb/dvs_env.sv`). It:

- generates the clocks (666 ps, and the 220 ps delayed copy);
- plays the memory, with switching activity that changes every few thousand cycles;
- checks every delivered word against a scoreboard;
- checks that the memory is stalled in exactly the error cycles;
- checks that each window's count matches its own count;
- checks that `vdd_mv` follows an independent model of the controller and regulator
  cycle by cycle.

It counts each mechanism and fails if one never happened: corrected errors (stall plus
flush), steps down, steps up, hold decisions and reaching the minimum. The system
testbenches built on it:

| Testbench | Configuration | Result |
|---|---|---|
| `tb_dvs_bus_top` | window 1,000, delay 300, 200,000 cycles. Slow corner first, then a fast corner (`corner_pct` = 70) that drives the supply down to the minimum. | passes; errors, holds and the minimum all reached |
| `tb_dvs_bus_full` | all defaults, 2,000,000 cycles | about 15 s |
| `tb_workload_typical` | defaults, ten program-like traces of 1,000,000 cycles each, typical process, no IR drop, minimum 800 mV | 3.1 % of cycles corrected; mean supply per program 876–977 mV |
| `tb_workload_slow` | the same traces at the slow corner with 10 % IR drop, minimum 880 mV | 3.2 % of cycles corrected; mean supply per program 1056–1193 mV |

The two workload runs take about a minute each.

Each block's testbench was also run against a copy of the block with one deliberate
bug, and caught it.

### What the results do and do not show

The RTL of the digital parts is checked cycle by cycle:

- the recovery sequence;
- the window count;
- the decision;
- the regulator delay and limits.

The supply levels and error rates reached are only as good as the bus model, and the
data traces are synthetic.

The loop settles around the 1–2 % band, but the measured error share, about 3 %, is
higher than that band. The reasons:

- Each correction cycle also counts.
- In this model the error rate climbs steeply from one 20 mV step to the next. The
  loop alternates between a step under 1 % and a step well over 2 %, and the 3,000-cycle
  delay keeps it at the high step for part of the following window.

Single windows reach error rates well above 2 %, because a step up
only lands 3,000 cycles after the window that asked for it.

Energy is not modelled at all. Any energy saving has to be estimated from the supply
trace with one's own per-transition energy figures.

## Where this departs from the original description

- **Flop circuit.** The latch-level flop is written as two edge-triggered samples, one on
  `clk` and one on `clk_del`, with the restore mux at the main flop's input. The
  transparent phases of the latches are not modelled.
- **Restore select.** The restore mux of every cell is driven by the bank-wide error,
  not by the cell's own error. With a per-bit select, the cells without an error would
  take the next word at the restoring edge while the others restore the old one, and
  the word would be split.
- **Not described originally: stall, recovery-cycle mask, valid flag.** The stall back
  to the sender, the masked compare in the recovery cycle and the valid flag are not in
  the original description. They are one way of making the single-cycle penalty exact.
- **Internal window restart.** The error counter restarts by itself at each window
  end. There is no external reset input for it.
- **Supply change.** The regulator is a pure delay with one 20 mV step. The real
  supply would ramp, and the bus would see intermediate voltages during the 2 µs.
- **Ceiling.** The supply is limited to 1.2 V above as well as at `vmin_mv` below.
- **Bus delays.** They come from the analytic formula above, not from circuit-level
  delay tables. The constants and corner scales are this model's own.
- **Workloads.** The benchmark memory traces (ten programs, 10 million cycles each) are
  replaced by synthetic traces of 1 million cycles per program.
- **Not modelled: static scaling, other buses.** The static voltage-scaling study at
  fixed supplies is not reproduced. Neither is the comparison of other bus geometries.
  Only the bus with a 1.95 times larger coupling ratio is checked, and only its
  delays, through `CC_CG`.

## Simulating with Verilator

Verilator 5 with `--timing` is needed, because the bus model uses delays. From the
directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/dvs_pkg.sv rtl/*.sv tb/dvs_env.sv tb/tb_dvs_bus_top.sv \
    --top-module tb_dvs_bus_top -Mdir obj_top
./obj_top/Vtb_dvs_bus_top +verilator+rand+reset+2
```

Replace `tb_dvs_bus_top` with `tb_dvs_bus_full`, `tb_workload_typical` or
`tb_workload_slow` for the longer runs. For a block testbench, give the package, the
block's file (plus `dsff.sv` for the bank) and its testbench, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/dvs_pkg.sv rtl/dsff.sv \
    rtl/dsff_bank.sv tb/tb_dsff_bank.sv --top-module tb_dsff_bank
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

Things to vary:

- **Loop.** Set the window, the delay and the width through the top's parameters
  (`WINDOW`, `SETTLE`, `WIDTH`). The thresholds and the step size are in `dvs_pkg`.
- **Operating point.** Set `corner_pct`, `ir_drop_pct` and `vmin_mv`; in the system
  testbenches these are parameters of `dvs_env`.
- **Bus.** The bus model's constants are its parameters.
