# Vernier delay generator built from FPGA carry chains

A delay generator emits two pulses, *leading* and *lagging*, whose spacing
ΔT is set digitally. The spacing here must be programmable in steps much finer
than any FPGA clock period (tens of picoseconds) and still reach many
nanoseconds. Two steps give both:

```
ΔT = m · T_clk + n · r_f           T_clk = 2 ns (500 MHz),  r_f = T_s − T_f
```

* **Coarse step, m.** A counter on the 500 MHz system clock releases two
  pulses m clock periods apart.
* **Fine step, n.** Each coarse pulse starts a ring oscillator built from a
  short stretch of the FPGA's dedicated carry chain. The two rings have nearly
  equal lap times: T_f for the fast ring, T_s for the slow ring. Lap n of the
  fast ring becomes `leading` and lap n of the slow ring becomes `lagging`.
  Each lap adds r_f = T_s − T_f to the spacing, in the way a Vernier scale
  turns two nearly equal graduations into a fine reading.

Folding each delay line into a loop means a few dozen carry-chain cells do the
work of a long line. Only the *difference* between the two loops has to be
tuned. The price is dead time: the generator is busy for n · T_s after the
slow loop starts, which is up to about 208 ns for the largest fine code. This
is why large delays go to the cheap coarse counter. With r_f = 38.6 ps,
52 fine steps cover one clock period (52 × 38.6 ps ≈ 2 ns). The host keeps
n ≤ 52 and carries into m, so that every ΔT has exactly one code:

```
m = floor(ΔT / T_clk),   n = floor((ΔT − m · T_clk) / r_f)
```

The code follows a published FPGA prototype, with these figures:

| Figure | Value |
|---|---|
| Clock | 500 MHz |
| Fine resolution r_f | 38.6 ps |
| Carry-chain cells per loop | at most 32 |
| Reshaped pulse width T_p | 2 ns |
| Lap time of either loop | about 4 ns |
| Testing mode | one operation every 1 µs |

These figures are the default parameters. The SystemVerilog is a mix of
synthesizable control logic and behavioural timing models of the delay
elements. Both kinds are described below.

## Block structure

```
                   +-------------------+   m_act   +------------------------+
 host port ------->| control_interface |---------->| coarse_delay_generator |
 (cfg_m, cfg_n,    |                   | trigger,  |  en_controller         |
  start, auto)     |                   | clear     |  pulse_extractor (0,m) |
                   +-------------------+           +-----------+------------+
                            | n_act, clear          coarse_out1 | coarse_out2
                            v                                   v
                   +---------------------------------------------------------+
                   | fine_delay_generator                                    |
                   |   vernier_delay_loop: fast loop (31 DU), slow loop (32) |
                   |   pulse_extractor (n, n)                                |
                   +---------------------------+-----------------------------+
                                               |
                                     leading, lagging
```

The top level is `vernier_delay_generator`. It takes the 500 MHz clock and a
plain parallel host port as inputs. In the prototype these come from a PLL
and from a USB controller chip, and neither is part of this RTL. The two loop
oscillations come out as `fast_osc` and `slow_osc`, because those are the
points where the loops are observed and trimmed.

| File | Kind | Role |
|---|---|---|
| `vdg_pkg.sv` | package | widths, clock period, testing-mode period, model delays, `delay_code_t` |
| `control_interface.sv` | RTL | host registers, trigger, testing mode, clear sequencing |
| `en_controller.sv` | RTL | gates the clock into the coarse extractor from T0 on |
| `pulse_extractor.sv`, `pulse_extractor_ch.sv` | RTL | counter, comparator, mux and flip-flop: picks pulse k of a sequence |
| `coarse_delay_generator.sv` | RTL + delay buffers | two pulses m clocks apart |
| `delay_buffer.sv` | model | fixed transport delay |
| `delay_unit.sv` | model | one carry-chain cell (DU) |
| `carry_delay_line.sv` | model | a chain of DUs with all taps brought out |
| `pulse_width_reshaper.sv` | model | flip-flop plus delay: every pulse gets width T_p |
| `delay_loop.sv` | model | one ring: reshaper, OR, DU chain, reshaper, feedback mux |
| `vernier_delay_loop.sv` | model | the fast and the slow ring |
| `fine_delay_generator.sv` | RTL + models | the Vernier loop plus a pulse extractor with presets (n, n) |
| `vernier_delay_generator.sv` | top | wires the three parts together |

## The pulse extractor

The same block does both steps. Each channel takes a pulse sequence and
passes one pulse of it, the one whose 0-based index equals the channel's
preset. Each channel has four parts:

* a counter clocked by the sequence;
* a comparator against the preset;
* a 2:1 multiplexer, with input 0 tied to ground, input 1 the sequence, and
  select driven by the comparator;
* a D flip-flop with D tied high, clocked by the multiplexer output.

The flip-flop's Q goes through a fixed delay buffer τ_p back to its own
asynchronous clear. The output is therefore a pulse τ_p wide (1 ns here),
which starts one clock-to-Q after the selected pulse's rising edge.

Three choices keep the channel clean. None of them is in the published
description.

* **The counter advances on the falling edge.** The comparator, and so the
  multiplexer select, only changes while the sequence is low. The multiplexer
  then passes a whole pulse and never a sliver of one.
* **Preset 0 is a bypass.** Straight after `clear` the counter is 0, so the
  comparator is already true and the very first pulse passes. This is how
  the coarse channel with preset 0 marks the starting moment T0, and how
  n = 0 takes the first lap.
* **The counter is one bit wider than the preset and stops past it.** The
  oscillators keep running until the operation is cleared, so without the
  stop the counter would wrap round and match a second time.

In the coarse step both channels count the same gated clock: channel 1 with
preset 0, channel 2 with preset m. Both outputs go through identical paths, so
their spacing is exactly m · T_clk. In the fine step, channel 1 counts the
fast ring and channel 2 the slow ring, both with preset n.

## The Vernier delay loop

Each ring is built like this:

```
start --> reshaper --> OR --> DU x NUM_DU --> reshaper --+--> osc
                       ^                                 |
                       +------- MUX (clear ? 0 : osc) <--+
```

A rising edge on `start` injects one pulse. The OR merges it into the loop,
and it then runs round, appearing once per lap at `osc`. Raising `clear`
switches the multiplexer to ground, which opens the loop and lets the pulse
die. The lap time is

```
T = T_MUX + T_OR + NUM_DU · T_DU + T_DFF + T_p
```

The model uses these values:

| Quantity | Value |
|---|---|
| T_MUX | 150 ps |
| T_OR | 150 ps |
| T_DU | 38.6 ps |
| T_DFF | 550 ps |
| T_p | 2000 ps |
| Fast loop | 31 DUs, T_f = 4046.6 ps |
| Slow loop | 32 DUs, T_s = 4085.2 ps |
| r_f | 38.6 ps |

In silicon the DU delays are not design values. There, a seed loop is placed
once and copied, which gives both rings the same structure. The longer ring
is then shortened one DU at a time at its end ("fine-tuning point") while the
two `osc` signals are watched on a scope, until the difference has the wanted
size. The RTL keeps that structure: each ring holds the same 32-cell seed
chain (`SEED_DU`) and is closed at the tap after cell `P_DU` (fast ring) or
`Q_DU` (slow ring). The cells past the tap stay in place, unused. Trimming
is then simply the choice of `P_DU` and `Q_DU`.

**Why the reshaper, and the lap-time rule.** A pulse going round a ring of
real gates would shrink or grow a little on every lap until it vanished or
filled the loop. The reshaper stops this. A rising edge on its input clocks a
flip-flop whose D is tied high. Q passes through a T_p buffer to the output,
and the output also clears the flip-flop. So every pulse leaves with width
exactly T_p, whatever width it arrived with.

This brings a timing rule. The flip-flop's clear is held for T_p after the
output rises. The next rising edge from round the loop must arrive after that
clear has been released, or it is lost and the ring stops. The loop without
the reshaper's own T_p must therefore last more than T_p, which means
**T > 2 · T_p**. The clock-to-Q value of 550 ps is set so that both rings
meet this rule with margin (4046.6 > 4000).

**The constant offset.** The slow ring's first pulse also passes through its
extra DU before it first appears at `osc`. The measured spacing is therefore

```
lagging − leading = m · 2000 + (n + 1) · 38.6 ps        (default model)
```

This is one r_f more than the ideal formula, for every code. A user removes
it by calibration, as with any fixed skew between the two outputs. The
leading edge itself comes at

```
T0 + τ_p + (T_OR + 31·T_DU + T_DFF + T_p + T_DFF + T_p) + n · T_f + τ_p
   = T0 + 1000 + 6446.6 + n · 4046.6 + 1000  ps
```

Here T0 is the first gated clock edge. The two reshapers per ring each add
one T_DFF + T_p on the first pass only.

## Control, clearing and the testing mode

`control_interface` is a three-state sequencer (CLEAR, IDLE, WORK) clocked
by the 500 MHz clock:

1. The host writes `cfg_m` and `cfg_n` with `cfg_valid`. An operation starts
   on `start`, or continuously while `auto_mode` is high.
2. The trigger cycle latches the code into `m_act` and `n_act` and pulses
   `delay_trigger` for one cycle. The code stays fixed until the operation
   ends. If `cfg_valid` is high in the trigger cycle, the new code is used.
3. `en_controller` samples the trigger on the falling clock edge. It then
   lets the clock through to the coarse extractor, so the first gated pulse
   is a whole one. That pulse is T0.
4. The working window lasts `PERIOD_CYCLES − CLEAR_CYCLES` = 496 cycles.
   After it, `clear` is high for `CLEAR_CYCLES` = 4 cycles (8 ns). `clear`
   resets both extractors and the En controller, and opens both rings. A
   clear lasting at least one lap (4 ns) makes sure that no pulse is left
   circulating.
5. With `auto_mode` high the next trigger follows the clear directly. One
   operation therefore runs every 500 cycles, exactly 1 µs. This is the
   self-resetting testing mode used to gather thousands of hits for each
   code on an oscilloscope.

The worst-case operation, m = 255 and n = 52, is finished about 736 ns after
the trigger, well inside the window. `busy` is high outside IDLE, and
`ops_done` counts completed operations. Two assertions check the sequencing:
`clear` is only ever high in CLEAR, and the trigger only ever leaves a
generator that is idle or has just been cleared.

`clear` comes from a flip-flop and drives only asynchronous clears. After
reset it is low and it rises on the first clock edge, so every downstream
clear sees a real edge. All other registers start at their power-up value,
which is 0, as FPGA registers do after configuration.

## What is synthesizable and what is a model

Counters, comparators, flip-flops, multiplexers and the sequencer are
ordinary synthesizable SystemVerilog. The delay elements are not:

* `delay_buffer` is a transport delay. Every edge reappears exactly
  `DELAY_PS` later, held in a queue, so runt pulses pass through unchanged.
* `delay_unit`, `carry_delay_line`, `pulse_width_reshaper`, `delay_loop` and
  `vernier_delay_loop` are built on `delay_buffer`.

These files describe the timing of the circuit, not a netlist. To build the
design in an FPGA, the DUs must be mapped by hand onto the carry chain, and
the τ_p and T_p buffers onto LUT or routing delays. The rings are
combinational loops, and need the vendor's placement and loop-permission
constraints. The prototype used about 668 LUTs and 146 registers.

Verilator's lint gives a few expected warnings:

* `rst_n` and `clear` are reported as used both synchronously and
  asynchronously. The synchronous use is only the sequencer's clocked
  assertions, which sample them.
* The transport delay in `delay_buffer` waits for a time computed at run
  time, which gives a warning that the wait could be zero. It never is,
  because every delay is positive.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `T_CLK_PS` | 2000 | 500 MHz clock of the prototype |
| `M_W` | 8 | own choice; keeps the worst operation inside the 1 µs period |
| `N_W`, `N_MAX` | 6, 52 | 52 is the prototype's largest fine code |
| `PERIOD_CYCLES` | 500 | 1 µs self-reset period of the prototype |
| `CLEAR_CYCLES` | 4 | own choice; the clear must outlast one lap |
| `SEED_DU` | 32 | cells per ring in the prototype's seed chain (its maximum) |
| `P_DU`, `Q_DU` | 31, 32 | taps of the fast and the slow ring; the difference of one DU is own choice |
| `TP_PS` | 2000 | T_p of the prototype |
| `T_DU_PS` | 38.6 | set equal to the prototype's resolution |
| `TAU_P_PS`, `T_DFF_PS`, `T_OR_PS`, `T_MUX_PS` | 1000, 550, 150, 150 | model values |

Choosing the DU counts and delays to reach another resolution only needs
`loop_period_ps()` in the package. Keep both laps above 2 · T_p.

## Where this departs from the prototype

* **No noise, no drift.** The prototype's rings show jitter that grows with
  the square root of the oscillation time, about 34 ps RMS at n = 52. Their
  r_f moves with core voltage and temperature. The models are exact and
  noiseless, so DNL and INL come out zero here.
* **One-r_f offset.** The offset described above comes from taking the
  one-DU difference as the only difference between the rings.
* **Two reshapers per ring.** The prose of the prototype mentions one
  reshaper per loop, while its circuit drawing shows one at the loop input
  and one at the loop end. The drawing is followed.
* **Own choices in the extractor and the En controller:** the falling-edge
  counting, the counter stop, clearing the output flip-flops with `clear`,
  and sampling the trigger on the falling edge.
* **Host side.** The USB link and the clock PLL are outside this RTL. The
  host port is a simple parallel register write, and the sequencer's fixed
  window is its own design.
* **Trimming.** Trimming by hand, and the small extra delay that re-routing
  the trimmed end adds, are represented only by the choice of `P_DU` and
  `Q_DU`.

## Simulating

All files use `timeunit 1ps` with 10 fs precision. Verilator 5 with timing
support runs every testbench:

```
verilator --binary --timing --assert -Wno-fatal -y rtl \
    --top-module tb_vernier_delay_generator \
    rtl/vdg_pkg.sv tb/tb_vernier_delay_generator.sv
obj_dir/Vtb_vernier_delay_generator
```

The simulator is two-state and starts variables at random values. Adding
`+verilator+rand+reset+2` shows that nothing depends on luck. Every
testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself, and
each has a watchdog.

| Testbench | What it shows |
|---|---|
| `tb_delay_buffer` | transport delay, including pulses shorter than the delay |
| `tb_carry_delay_line` | tap k at (k + 1) · T_DU, the output at NUM_DU · T_DU |
| `tb_pulse_width_reshaper` | output width T_p for short and long inputs; delay T_DFF + T_p |
| `tb_pulse_extractor` | pulse k of a sequence for several presets, preset 0, no second match |
| `tb_en_controller` | gating starts on a whole clock pulse and stops on clear |
| `tb_control_interface` | trigger, latching, 1 µs period in testing mode, clear length |
| `tb_vernier_delay_loop` | lap times T_f and T_s over many laps; clear stops both |
| `tb_coarse_delay_generator` | spacing m · 2 ns for a range of m |
| `tb_fine_delay_generator` | spacing (n + 1) · r_f and the lap-n timing of the leading output |
| `tb_vernier_delay_generator` | end to end at the default parameters (see below) |
| `tb_dnl_sweep` | n = 0 … 52 at m = 0 and m = 1: resolution, fine range, DNL, INL |

The end-to-end test runs at the default parameters. It covers the two
operating points (m, n) = (0, 6) and (3, 6), which give 270.2 ps and
6270.2 ps in this model. It also covers the corner codes (0, 0), (0, 52),
(1, 0) and (255, 52), random codes, and a run in testing mode, where the
operations must follow each other exactly 1 µs apart. It counts each
mechanism and fails if one never happens:

* coarse bypass and coarse counting;
* fine bypass and fine lap counting;
* single-shot and testing-mode operations;
* `clear` stopping the rings.

The sweep measures r_f = 38.600 ps and a fine range of 2007.2 ps.
