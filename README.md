# Binary-search mixed-mode DLL with clock-failure recovery

A delay-locked loop (DLL) delays an input clock by exactly one period, so that
the taps of its delay line give evenly spaced copies of that clock. This design
makes eight phases, `CLK_OUT[7:0]`, spaced `T/8`, for input clocks from
533 MHz to 4.26 GHz.

The delay line is analog: current-starved inverters whose speed is set by a
bias voltage from a 10-bit DAC. That gives a fine time step, well under a
picosecond per code. A loop that walks such a DAC one code at a time needs
hundreds of cycles to lock. Coarse-then-fine walking is faster, but its lock
time still depends on where the loop starts. Here the digital loop controller
runs a **binary search** over the 10-bit code instead. It always locks in
B+1 = 11 control-clock cycles.

Large search steps cause a problem the slow schemes never meet. A jump of
hundreds of codes makes the DAC output overshoot. For a moment the delay
stages are starved so hard that the clock dies inside the line. The design
therefore adds a **toggle detector**, which tells the controller whether the
clock still reaches the first tap. When the clock has stalled, the
controller goes back to the last code that worked and continues with a
smaller step. The search does not have to start over.

## Block structure

```
 CLK_IN,P/N ─┬──────────────────────────► vcdl (10 delay elements) ──► CLK_OUT[7:0]
             │                              ▲   │CLK_REF  │CLK_FB
             │               V_CTRLP ───────┤   │         │
             │      dac ◄── code ──┐        │   ├──► bbpd ◄┘
             │       │ V_CTRLP     │  V_CTRLN   │     │ PD_ER
             │       └─► replica_bias ──┘     │     ▼
             ├──► clk_div (÷1,2,4,6,8) ──CLK_CTRL──► bs_controller ──► locked, stall_event, error
             │                                │     ▲  │ pd_rst
             └──► toggle_detector ◄── CLK_REF ┘     │  │
                  (edge_detector inside) ─toggling─┘  └─► resets bbpd and toggle_detector
```

| Module | Kind | What it is |
|---|---|---|
| `mm_dll` | top (contains models) | wires everything below together |
| `bs_controller` | synthesizable | binary-search state machine, code/step/codepre registers |
| `toggle_detector` | synthesizable | two flip-flops that flag a stalled CLK_REF |
| `edge_detector` | behavioural | buffer + XOR pulse generator used by the toggle detector |
| `bbpd` | synthesizable | bang-bang phase detector (one flip-flop) |
| `clk_div` | synthesizable | CLK_CTRL = CLK_IN / N, N ∈ {1, 2, 4, 6, 8} |
| `dac` | behavioural | 10-bit DAC for V_CTRLP, with overshoot on large jumps |
| `replica_bias` | behavioural | V_CTRLN = VDD − V_CTRLP |
| `vcdl` | behavioural | ten delay elements and the phase taps |
| `delay_element` | behavioural | two cascaded CSIs, a capacitor bank, clock buffers |
| `csi` | behavioural | pseudo-differential current-starved inverter |
| `dll_pkg` | package | `DAC_BITS`, `NUM_PHASES`, `NUM_DE`, state and divider enums |

The four digital blocks are plain synthesizable SystemVerilog. The analog
blocks are event-driven models that use `real` voltages and computed delays.
They exist so that the loop can be simulated end to end. They are not
circuits, and their numbers are not silicon data.

## The binary search (`bs_controller`)

### Registers

- `code` is the DAC code now applied to the line.
- `step` is a one-hot shift register. It starts at `step_init`, 512 by
  default.
- `codepre` is the last code that was seen to keep the clock running.
- `state` is one of IDLE, SEARCH, REVERT, LOCKED and ERROR.

### Search

On reset, the code is `code_init` (0 by default) and the step is `step_init`.
Code 0 is the shortest delay. Starting there means that CLK_FB leads CLK_REF
at the start. This is what rules out locking to two or more periods
(harmonic lock).

After `en` rises, each rising edge of CLK_CTRL does one update:

```
if toggling (the code applied last cycle kept the clock alive):
    codepre <= code
    code    <= code + step   if PD_ER = 0   (CLK_FB leads: more delay)
               code - step   if PD_ER = 1   (CLK_REF leads: less delay)
    if step > 1: step <= step >> 1
    else:        state <= LOCKED            (this was the move by 1)
```

With code 0 and step 512, the first edge always moves to 512. The later
edges move by 256, 128, …, 2, 1. The 10th edge after `en` makes the move by
1, and `locked` rises on that same edge. So the search visits B+1 = 11
codes, counting the start code, in B = 10 control cycles.

A plain search at 4.26 GHz in the included model goes:

```
0, 512, 768, 640, 704, 736, 752, 744, 748, 746, 745(*)   (* = locked)
```

After that, each cycle moves the code by ±1. This is the normal bang-bang
dither of a locked loop. The code saturates at 0 and 1023.

### Recovery from a stalled clock

`toggling` reports on the code applied during the previous control cycle.
When it is 0, the controller does not trust the phase detector. Instead it
does this, in one edge:

- `code <= codepre`, the last working code.
- `step <= step >> 1`. The step has now been halved twice compared with the
  failing move.
- `stall_event` is raised.
- `pd_rst` pulses high for half a CLK_CTRL cycle. This clears the phase
  detector and the toggle detector, so both judge the restored code afresh.
- The state becomes REVERT.

On the next edge the controller applies `codepre ± step` with the smaller
step. If that code keeps the clock alive, `stall_event` clears and the
search goes on as before. If the clock stalls again, the state becomes
ERROR. ERROR holds until `rst`. The system is then expected to restart with
other delay-range settings (`cb_en`, `bw_p`, `bw_n`).

A stall hardly lengthens the search. The revert cycle skips one step size,
so it takes the place of the move it skips. The exception is a stall on the
move by 2: the step cannot drop below 1, so the revert and a retry by 1
come before the locking move, and lock comes two edges later. In
the end-to-end stall test, lock still comes at the 10th control edge after
`en`. The lock time stays predictable with or without a stall.

### Other controller behaviour

- **Freeze.** `freeze` holds every register, so a debugger can sample the
  code and the output clocks at any point of the search.
- **Start values.** `code_init` and `step_init` are inputs. A search can
  start from a known neighbourhood, for example code 100 with step 64.

### Timing

- All inputs are sampled on the rising edge of `clk_ctrl`.
- `code`, `codepre`, `step` and `state` are registered outputs.
- `locked` and `error` are decoded from `state`.
- `pd_rst` goes high at a rising edge and low at the next falling edge.
- Assertions check two rules: the step register is one-hot outside IDLE,
  and `locked` implies step = 1.

## Detecting a dead clock (`toggle_detector`, `edge_detector`)

The toggle detector compares CLK_REF, the first tap of the line, with
CLK_IN.

1. **FF1** loads a 1 on every rising edge of CLK_IN.
2. `edge_detector` makes a short pulse on every rising and falling edge of
   CLK_REF. The pulse comes from a buffer and an XOR, and is 8 ps wide in the
   model. This pulse, or the reset, clears FF1. While CLK_REF toggles, FF1 is
   cleared again within a fraction of a period.
3. **FF2** samples FF1 on the next rising edge of CLK_IN. It therefore sees
   a 1 only when a whole CLK_IN cycle passed without any CLK_REF edge.
4. `toggling = ~FF2`.

The worst-case latency, counted from the first missing CLK_REF edge, is
under one and a half CLK_IN cycles. A control cycle lasts N CLK_IN cycles,
so for N ≥ 2 a stall that a new code causes soon after it is applied is
flagged by the next control edge.

FF2 is sticky: once it holds a 1, it keeps it (`D = FF2 | FF1`) until the
controller's `pd_rst` or the global reset. Without the hold, the flag would
clear itself as soon as the overshoot decays and the clock restarts, and
the controller could miss it. The stall is meant to stay visible until the
controller has moved to a working code and reset the detector.

## Phase detector, divider and bias

### `bbpd`

A flip-flop samples CLK_REF on the rising edge of CLK_FB. CLK_FB comes eight
delay elements after CLK_REF.

- PD_ER = 1 means CLK_REF leads, so the line is too slow.
- PD_ER = 0 means CLK_FB leads.

The result is valid while the loop delay is between half a period and one
and a half periods. Starting the search from the shortest delay keeps it in
that window.

### `clk_div`

A two-bit counter toggles CLK_CTRL every N/2 input cycles, which gives a
50 % duty cycle. For N = 1, a clock mux passes CLK_IN straight through. A
larger N lowers the loop bandwidth and gives the controller's logic and the
DAC more time to settle.

### `dac` and `replica_bias`

The DAC output is

```
V_CTRLP = 0.4 V * code / 1024
```

A higher code gives a weaker PMOS pull-up and a longer delay.

When the code changes, the output follows in two phases:

- After 20 ps it reaches the target plus half the size of the jump.
- It settles to the target 400 ps later.

This overshoot is what stalls the line on large jumps.

The replica gives `V_CTRLN = 0.75 V − V_CTRLP`. The two rails are therefore
starved equally and the duty cycle stays balanced.

## The delay line (`vcdl`, `delay_element`, `csi`)

### `vcdl`

The line has ten non-inverting delay elements (DEs):

| DE | Role |
|---|---|
| DE0..DE7 | drive `CLK_OUT[0..7]` from their P side |
| DE0 | also drives CLK_REF from its N side, i.e. the complement of `CLK_OUT[0]` |
| DE8 | drives CLK_FB from its N side |
| DE9 | dummy load, so DE8 sees the same load as the others |

Locking CLK_FB one period behind CLK_REF places eight DE delays between
them. The phases are then `T/8` apart. `en_clkout[i]` enables phase `i`;
a disabled output reads 0.

### `delay_element`

Each DE is two CSIs in series. Each CSI output carries a capacitor

```
C = 3.5 fF + 3.2 fF * cb_en
```

### `csi`

Each CSI edge takes

```
t = C * ( R_MAIN + 1 / (G_STATIC + G_TAIL * n_on * Vov) )
```

- `n_on` is the number of tail branches switched on by `bw_p`/`bw_n`.
- `Vov` is the tail overdrive: V_CTRLN − VT when pulling down, and
  VDD − V_CTRLP − VT when pulling up.
- The first term is the main inverter. The second is the tail current
  source, which dominates when the tail is starved.
- A weak static branch (`G_STATIC`) bounds the delay when all tails are off.

Edges are **inertial**. An input edge that is undone before its output edge
is due is swallowed. When a bias overshoot makes a stage slower than half a
period, the clock stops at that stage. This is the clock-failure mechanism
that the toggle detector has to catch.

### Coverage of the frequency range

| f_in | period | cb_en | tails (bw) | N | lock code | lock time from `en` |
|---|---|---|---|---|---|---|
| 4.26 GHz | 234.7 ps | 0 | 1111 | 4 | 745 | 8.92 ns |
| 800 MHz | 1250 ps | 2 | 0001 | 1 | 769 | 11.88 ns |
| 533 MHz | 1876 ps | 3 | 0001 | 4 | 855 | 71.3 ns |

At 4.26 GHz the eight-DE delay spans about 198 to 311 ps over the code
range, roughly 0.11 ps per code. Lock time is always B control cycles after
`en`, so it scales with N / f_in. With all tails off (`bw = 0000`) the line
cannot pass the clock at any code. The controller then reports `error`.

## Using the top (`mm_dll`)

1. Apply `rst` (asynchronous, active high). It needs a rising edge: drive it
   low, then high.
2. Set `div_sel`, `cb_en`, `bw_p`, `bw_n`, `code_init` and `step_init` while
   in reset.
3. Release `rst`, then raise `en` a few control cycles later.
4. `locked` rises B = 10 control edges after `en`. A stall that the
   controller recovers from (`stall_event`) adds at most two edges. If `error`
   rises instead, reset and try again with another `cb_en`/`bw` setting.

`B` is the only parameter of the top; it defaults to 10. The phase-detector
output, the toggle flag, `code`, `codepre`, `step` and `state` are brought
out for observation.

## Simulation

Every `.sv` file sets `` `timescale 1ps/1fs ``. The models need
`--timing`. For example, the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mm_dll \
    -y rtl -Irtl rtl/dll_pkg.sv tb/tb_mm_dll.sv
./obj_dir/Vtb_mm_dll
```

Swap the testbench name to test a single block. Each testbench
(`tb/tb_<module>.sv`) checks its block against values worked out by hand or
from the formulas above. Each ends with a `TB_RESULT checks=… failures=…`
line and has a watchdog.

`tb_mm_dll` runs the top at its default parameters:

- It locks at 4.26 GHz, 800 MHz and 533 MHz.
- It checks the code sequence: the step halves every edge and lock comes at
  the 10th edge.
- It checks the lock time: under 10.5 ns at 4.26 GHz and under 12.5 ns at
  800 MHz.
- It checks the CLK_FB alignment and the T/8 phase spacing, within 0.8 ps
  at 4.26 GHz.
- It checks dither and freeze.
- It forces a stall: it starts at code 511, so the first jump lands on 1023
  and the overshoot kills the clock. The controller must revert, recover and
  lock within 10 control edges.
- It forces an error: with all tails off, the controller must end in ERROR.
  A restart with all tails on must then lock.

It counts each of these mechanisms and fails if any never happened. It runs
in well under a second.

The simulator is two-state. Every register has a reset, and every model
output has an initial value.

## Where this RTL departs from, or adds to, the published design

### Controller timing and registers

- **One update per control cycle.** The published state diagram splits each
  iteration into separate states: check the phase detector, move, check
  toggling. Taken literally, that would need several clocks per step. It
  also states a lock time of B+1 control cycles, and the datapath it shows
  does the whole move in one cycle. Here each iteration is one cycle.
- **Step register width.** The datapath figure labels the step `[8:0]`, but
  the search starts with a step of 512, which needs 10 bits. The step
  register here is B = 10 bits wide.
- **Example sequence.** The published illustration of the search ends with
  "…724, 725" after a step of 2, which does not follow the halving rule.
  This RTL follows the rule.
- **Revert.** The revert takes two cycles: first back to `codepre`, then
  `codepre ± half the step`. This follows the text and state diagram. The
  datapath drawing could also be read as a single-cycle `codepre ± step`.
- **When `locked` rises.** `locked` is a state, not the raw `step[0]` bit.
  It rises on the edge that finds the step register at 1 with the clock
  alive; that edge makes the move by 1. After lock, toggling is no longer
  checked.
- **Own choices.**
  - `stall_event` clears when the retried code runs; the published diagram
    never clears it.
  - Code saturation at 0 and 1023.
  - The `pd_rst` pulse width.
  - The asynchronous reset and the `en` input.

### Detectors and divider

- **Toggle detector.** The FF2 hold path is added, as explained above.
  Only CLK_REF is watched. Watching several phase pairs and OR-ing the
  flags is a described option that is not built.
- **Phase detector and divider insides.** These are the simplest circuits
  that have the described behaviour. The published design gives only their
  function.

### Analog models

- All constants are assumptions: VT, the resistances and conductances, the
  capacitances, the DAC full scale, and the overshoot size and duration.
- The lock codes do not match measured silicon. The published measurements
  lock at 957 (533 MHz) and 725 (4.26 GHz); the model locks at 855 and 745.
- The cross-coupled inverters between the two rails are not modelled, so
  both rails have identical delay.
- Disabled tri-state buffers drive 0.
- Jitter, PVT corners, power and supply noise are not modelled.

### Outside this RTL

- The PLL that makes CLK_IN,P/N.
- The debug chain that routes internal clocks to pads.
