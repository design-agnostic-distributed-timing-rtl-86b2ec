# Clock-replica timing fault-injection monitor

A timing fault-injection attack makes a circuit miss its timing on purpose. The attacker may shorten or lengthen a clock phase (a clock glitch). They may also stretch the logic delay by lowering the supply, coupling an EM pulse into the supply, or heating or cooling the chip. Either way, the time the clock gives the logic stops matching the time the logic needs.

This monitor detects both kinds of attack with one small, fully digital circuit. It builds a **replica of the clock's high phase** from a digitally tuned delay line and locks that replica to the real clock. From then on, in every cycle, it checks that the clock's falling edge still arrives inside a narrow acceptance window around the replica.

- A clock glitch moves the falling edge away from the replica.
- A voltage, EM or temperature attack changes the replica's own delay, and so it moves the replica away from the falling edge.

In both cases the alert is raised in the same clock cycle. The only way past the monitor is to change gate delays and the clock together so that they still match. But then there is no timing violation to exploit.

This repository gives SystemVerilog for the monitor:

- the delay line;
- the locking and tracking state machine;
- the sampling and alert logic;
- the two-monitor arrangement that covers both clock phases;
- the shift-register clock-pattern generator used to play clock glitches into it.

The analog parts (ring oscillator, delay cells, varactor stage) are behavioural models with fixed delays.

## One cycle of the monitor

The rising clock edge is sent down a configurable delay line (CDL). This produces three pulses, all delayed from that rising edge:

```
CLK ─► coarse ─► medium(8) ─► fine ─►  P_Min ─► medium16(w_neg) ─► P_L ─► medium16(w_pos) ─► P_Max
```

| Pulse | Delay from the rising clock edge |
| --- | --- |
| P_Min | `D = coarse + medium + fine` (the main line) |
| P_L | `D + 100 ps·(w_neg+1)` |
| P_Max | `D + 100 ps·(w_neg+1) + 100 ps·(w_pos+1)` |

For each pulse P_x there is a flop D_x:

- Its D input is tied to 1 and it is clocked by the rising clock edge, so it is set at the start of the cycle.
- It is cleared asynchronously when P_x arrives.
- At the falling clock edge a second flop R_x samples D_x. So R_x = 1 means "the pulse had not yet arrived when the clock fell".

The state machine keeps **P_L on the falling edge**. The acceptance window is therefore [P_Min, P_Max] = [P_L − 100(w_neg+1), P_L + 100(w_pos+1)] ps. In a healthy cycle R_Min = 0 and R_Max = 1. Anything else means:

- **R_Min = 1**: the high phase was shorter than P_Min. Either the clock pulse was too short, or the replica slowed down (for example a supply droop).
- **R_Max = 0**: the high phase outlasted P_Max.

`alert = R_Min | ~R_Max` is available right after the falling edge. Its rising edge sets the sticky `glitch` flag, which is cleared only while the monitor is not locked (ready low).

## The delay line

The main line has three stages. The numbers are those of the 65 nm test chip and are held in `fia_pkg`.

| Stage | How it works | Delay (ps) |
| --- | --- | --- |
| Coarse, 9-bit `c_cfg` | A gated ring oscillator (500 ps period) starts with the clock's high phase. A counter counts its rising edges. When the count equals `c_cfg`, the stage fires. | 130 + 500·c |
| Coarse bypass | A 100 ps pulse generator on the clock edge. It also clears the counter each cycle. | 70 |
| Medium, 8 settings `m_cfg` | Path-selection line with a thermometer code. A 1 in the code sends the pulse one unit further before it turns back. | 100·(m+1) |
| Fine, 4-bit `f_cfg` | A varactor-loaded chain tapped at 10 ps steps. | 295 + 10·f |
| Fine bypass | — | 130 |

The two window lines have the same path-selection structure as the medium stage, with 16 settings each.

The coarse stage is what gives the line its range. It runs from 400 ps (everything bypassed, w_neg = 0) to about 257 ns (c = 511, everything at its maximum). That covers clock frequencies from about 2 MHz up to about 1.25 GHz. Counting also doubles as a one-cycle measurement of the clock: the counter value at the falling edge, `Count_RO`, is the number of whole RO periods in the high phase.

The other stages are built as follows:

- The medium stage is real RTL: forward cells, a thermometer mux per unit, and return cells.
- The ring oscillator is one NAND fed back through a delay of half a period.
- The fine stage and the delay cells use `#` delays. In silicon these are standard cells whose delay comes from placement; here they are fixed numbers.

Verilator's continuous-assignment delays are inertial, so each delay chain is made of cells of at most 50 ps. A 100 ps pulse then survives any chain length.

## Locking

The state machine `pw_lock_fsm` runs on the rising clock edge. In each cycle it uses the R_L that was sampled at the previous falling edge, which belongs to the setting in force during that cycle. Locking proceeds as follows:

1. **RESET → COARSE (1 cycle).** Everything is zero and the coarse counter times one high phase. `c_cfg` is then set to `Count_RO`.
2. **MEDIUM.** The search starts at 0 and steps up while R_L = 0 (replica shorter than the pulse). It steps back down when R_L = 1. It ends when R_L shows 0, 1, 0, which leaves the largest setting that is still shorter than the pulse.
3. **FINE.** The same search on `f_cfg`. This step is skipped when the fine stage is bypassed.
4. **TRACK.** `ready` rises.

The guess from step 1 is often too long. The coarse offset and the window line add to c·500 ps, so the medium search can find R_L = 1 even at its minimum. This is a **stuck minimum**, handled in this order:

- If the coarse stage is in use and c > 0, c is lowered by one and the medium search restarts. This step is this design's own addition.
- Once the line is at its true minimum, the bypass bits shift. First the coarse stage is bypassed, then the fine stage as well.
- If both are already bypassed, the FSM stops in **ERROR**.

After every restart, one observation is ignored. That observation was taken while the configuration was still changing.

Lock time is 1 cycle for the coarse stage, plus a medium and a fine search of at least three cycles each. The 0, 1, 0 pattern needs three observations; the upper bounds come from the number of settings. This gives 7 to about 27 cycles. At 250 MHz the model locks in about 19 cycles.

## Tracking, majority voting and configuration skips

Once locked, the FSM follows slow drift of the clock (temperature, aging, an oscillator wandering). It collects R_L over 5 cycles and, by majority, moves the whole coarse/medium/fine code one fine step up or down.

The stages overlap: each finer stage spans more than one step of the stage above it. On silicon this overlap is deliberate, because placement mismatch cannot be avoided. As a result, a plain carry (fine 15 → 0 and medium +1) can make the delay *drop*. A large enough drop would push the falling edge out of the window and raise a false alert.

The fix is three programmable **skips** (`skip_cfg_t`):

- after a medium carry, the fine code restarts at `m_fine` rather than 0;
- after a coarse carry, the medium and fine codes restart at `c_medium` and `c_fine`;
- a borrow is the exact reverse of a carry.

The defaults `SKIP_DEFAULT = (c_medium 1, c_fine 9, m_fine 6)` are the worked example for the measured silicon. With the ideal delays of this model, the values that keep every carry monotonic are c_medium = 3, c_fine = 5, m_fine = 5. The lock-FSM testbench uses those. With the defaults, a coarse carry in the model lowers the delay by about 160 ps. That is inside a 200 ps or wider window, so tracking still works without false alerts.

## Two monitors for the two clock phases

One monitor only watches the high phase. The arrangement in `fia_monitor_pair` is:

- **M1** is clocked by CLK.
- **M2** is clocked by its inverse, so it watches the low phase.
- `glitch` is the OR of both monitors' alerts.
- `ready` is the AND of both monitors' `ready`.

The twelve glitch types are written below with one bit per 500 ps, where the clean clock is `1111 0000`:

| Type | Waveform | Caught by (window ≤ 400 ps) | At a 600 ps window |
| --- | --- | --- | --- |
| T1 extra pulse in the low phase | `1111 0100` | M1 + M2 | caught |
| T2 low dip in the high phase | `1011 0000` | M1 + M2 | caught |
| T3 low phase skipped (long high) | `1111 1111 1111 0000` | M1 | caught |
| T4 high phase skipped (long low) | `1111 0000 0000 0000` | M2 | caught |
| T5 early rising edge | `1111 0001 1111 0000` | M1 + M2 | missed |
| T6 early falling edge | `1110 0000 1111 0000` | M1 + M2 | missed |
| T7 late falling edge | `1111 1000 1111 0000` | M1 + M2 | missed |
| T8 late rising edge | `1111 0000 0111 0000` | M1 + M2 | missed |
| T9 low phase −500 ps, phase shift | `1111 000` | M2 | missed |
| T10 high phase −500 ps, phase shift | `111 0000` | M1 | missed |
| T11 high phase +500 ps, phase shift | `11111 0000` | M1 | missed |
| T12 low phase +500 ps, phase shift | `1111 00000` | M2 | missed |

This is the behaviour the end-to-end test checks. A 500 ps edge shift escapes a window that is wider than 500 ps, while missing or extra phases are caught at any window.

A window of exactly 500 ps is a boundary case in this model. The edge shift then equals the window, so whether a T5–T12 glitch is caught depends on where, within one 10 ps fine step, the lock landed. On silicon, clock jitter makes such shifts indistinguishable from noise, and they are reported as missed.

Added pulses are caught even when they are much narrower than the window:

- A 100 ps pulse in the low phase gives M1 a high phase far shorter than P_Min.
- It splits M2's phase in two.

The end-to-end test plays such a pulse against a 600 ps window, and both monitors flag it.

## The test chip: pattern generator and clock selection

`fia_test_chip` is the top level. It wraps the pair with a clock source:

- **`clk_sel = 1`**: the monitors see the output of `pattern_gen`. This is a 64-bit circular shift register clocked at 2 GHz (`clk_fast`), so each bit lasts 500 ps and `1111 0000` ×8 is a clean 250 MHz clock.
  - A pattern written with `pat_load` waits in a shadow register until the current lap ends. This way patterns can be chained without a seam.
  - `pat_lap` marks the last bit of each lap.
- **`clk_sel = 0`**: the monitors see `clk_ext`. The testbench uses this input to reach the frequencies and slow drifts that the 500 ps grid cannot make.

Ports:

| Port | Meaning |
| --- | --- |
| `w_neg`, `w_pos` | window settings |
| `skip` | carry skips |
| `rst_n` | restarts locking in both monitors and clears the pattern register |
| `ready`, `error`, `glitch`, `glitch_m[1:0]` | status outputs |
| `cfg_m1`, `cfg_m2` | the locked settings, for observation |

## What to trust and where this model departs from the silicon

- **Delays are ideal constants.** Silicon delays vary with placement, voltage and temperature, and this is exactly what makes the monitor sensitive to voltage and EM attacks. Here such an attack can only be imitated by changing the clock's pulse width. The paper's figures give per-stage ranges: coarse 500 ps steps, medium 100 ps, fine 295–475 ps in 10 ps steps (a 4-bit code only reaches 445 ps). These are followed as closely as a linear model allows, so the overall totals differ a little from the measured ones.
- **The coarse-bypass delay (70 ps) and the 100 ps pulse width are derived, not measured.** 70 ps is what makes the minimum line delay come out at 400 ps.
- **Aliasing.** If the locked P_L or P_Max lands within about 100 ps before the next rising clock edge, or inside the next high phase, the flops see a pulse that belongs to the wrong cycle. The behavioural timing does not guard against this. It does not arise at the frequencies exercised here.
- **Lock time** is about 19 cycles at 250 MHz rather than the 15 measured. The differences are the coarse back-off and the ignored observation after each restart.
- **Stuck-minimum handling with c > 0** (lowering the coarse setting) and the 5-cycle vote length are this design's choices.
- **The delay line's position relative to a real critical path** is not modelled. The monitor watches only the clock.
- **Only one monitor pair is built.** The measured chip has ten monitors whose interconnection is not described.

Not included:

- the generator flow that sizes the delay line for a given technology and frequency range;
- the PLL and the pulse-adder test circuit.

## Simulating

All files are plain SystemVerilog. Compile the package first, then the rest:

```
verilator --binary --timing --assert --top-module tb_fia_test_chip \
    rtl/fia_pkg.sv $(ls rtl/*.sv | grep -v fia_pkg) tb/tb_fia_test_chip.sv
obj_dir/Vtb_fia_test_chip
```

Every testbench ends with a line `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it covers |
| --- | --- |
| `tb_ring_osc`, `tb_coarse_stage`, `tb_medium_stage`, `tb_fine_stage`, `tb_cdl` | Stage and line delays against the formulas above |
| `tb_pw_sampler`, `tb_glitch_detect` | Sampling and the alert function |
| `tb_pw_lock_fsm` | The FSM against an abstract delay model: lock time, bypasses, error, drift with carries |
| `tb_fia_monitor` | One monitor at several frequencies, drift, short and long pulses |
| `tb_fia_monitor_pair` | Which monitor catches which phase |
| `tb_pattern_gen` | Shift register against a reference model |
| `tb_fia_test_chip` | End to end at default sizes |
| `tb_config_skip` | Slow drift across a coarse carry with skips 0/0/0 (350 ps drop, false alert), 1/9/6 (160 ps drop, no alert) and 3/5/5 (no drop) |
| `tb_lock_range` | Locking across 2 MHz … 1.2 GHz: Config_C = 495 at 2 MHz, coarse bypass at 714 MHz, both bypasses at 1.2 GHz |

`tb_fia_test_chip` runs the 36 glitch experiments, drift, a 100 ps added pulse, both bypasses and the error stop. It counts each mechanism and fails if one never happened. It takes a few seconds.

To change the technology numbers, edit `fia_pkg`:

- stage sizes: `COARSE_BITS`, `MED_UNITS`, `FINE_BITS`, `ACC_UNITS`;
- delays: `RO_HALF_PS`, `COARSE_OFS_PS`, `MED_UNIT_PS`, `FINE_OFS_PS`, `FINE_STEP_PS`, `FINE_BYP_PS`, `CBYP_DLY_PS`, `CBYP_PW_PS`.

The testbenches compute their expected delays from the same formulas, written out locally.

## Files

- `rtl/fia_pkg.sv`: constants, the `cdl_cfg_t`, `skip_cfg_t` and `lock_state_t` types.
- `rtl/delay_cell.sv`, `rtl/delay_chain.sv`, `rtl/ring_osc.sv`, `rtl/fine_stage.sv`: behavioural timing models.
- `rtl/coarse_stage.sv`, `rtl/medium_stage.sv`, `rtl/cdl.sv`: the delay line.
- `rtl/pw_sampler.sv`, `rtl/glitch_detect.sv`, `rtl/pw_lock_fsm.sv`: sampling, alert and control.
- `rtl/fia_monitor.sv`, `rtl/fia_monitor_pair.sv`: one monitor, and the phase pair.
- `rtl/pattern_gen.sv`, `rtl/fia_test_chip.sv`: the glitch pattern generator and the top level.
- `tb/tb_*.sv`: one self-checking testbench per module.
