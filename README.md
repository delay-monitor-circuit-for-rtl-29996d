# Single-delay-change monitor for sensitive nodes in SRAM-based FPGAs

In an SRAM-based FPGA most configuration bits steer the routing. When
radiation flips one of them, the flip can short a routed wire to an unused
one. The logic still works, but the net is now slower, and the extra delay
stays until the device is reconfigured. Such a *delay change* (DC) is
harmless on a path with plenty of timing slack. On a path whose slack is
smaller than the change it can cause, it turns into a delay fault. This
repository calls such a path a **sensitive node**.

Instead of slowing the whole design so that every path can absorb the
largest expected change, this design places a small **monitor** on each
sensitive node. The monitor reports a *single delay change* (SDC) as soon as
it happens, while the node still meets timing. The system can then react
before a second change turns into a real error: it can lower the clock
frequency, raise a flag, or scrub the affected configuration frames.

This SystemVerilog models the monitor, its carry-chain delay line, and the
FPGA test system used to exercise it. That test system has a PLL with a
reduced-frequency mode, a 64-bit LFSR as signal source, and twelve monitors
with staggered thresholds. It follows the architecture published in
*"Delay Monitor Circuit for Sensitive Nodes in SRAM-Based FPGA"* (Darvishi,
Audet, Blaquière). Where that description is silent, the choices made here
are listed in the last sections.

## How the monitor decides

```
                 tau1   A   tau2  B +-----------+ C  tau4   +-----+
  sut ----------[====]--+--[====]--| delay line |--[====]---| FF2 |--+
                        |          |  (ADL)     |           +-----+  |
                        |          +-----------+                     XOR --> sdc_flag
                        |   tau3                            +-----+  |
                        +--[====]---------------------------| FF1 |--+
                                                            +-----+
                                       clk, rst to both flip-flops
```

The signal under test (`sut`) goes to two flip-flops on the same clock. FF1
samples it almost directly and is the node's normal end point. FF2 samples
it after an **adjustable delay line** (ADL). Let `t` be the time from the
launching clock edge to the arrival of a `sut` transition, and `T` the clock
period:

| condition | FF1 | FF2 | `sdc_flag` |
|---|---|---|---|
| `t + tau1 + tau2 + tau_ADL + tau4 < T` | new value | new value | 0 |
| FF1 path still in time, FF2 path late | new value | old value | **1** |
| `t + tau1 + tau3 >= T` (delay fault) | old value | old value | 0 |

The delay line is set so that, on the healthy circuit, the first row holds
with a margin of `DC_th`:

    slack >= tau1 + tau2 + tau4 + tau_ADL + DC_th

`slack` is the node's own slack. Any change larger than `DC_th` but
smaller than what FF1 can absorb falls in the second row. It is reported
in the clock cycle after the first transition that arrives late. The flag
only shows on cycles where `sut` actually toggled; a constant signal hides
any delay. The flag lasts one cycle per late transition. Turning it into a
lasting state is the job of the logic around the monitor (see
`clk_sel_dff`).

A change larger than the full slack makes FF1 miss as well (third row). The
node has then already failed, and the monitor sees two equal samples. That
is why each monitor is tuned to the slack of its own node. It is also why
the reaction to a first change is to lower the frequency: a second change
must not reach the third row.

In `sdc_monitor` the routing delays `tau1`..`tau4` are parameters
(`TAU1_PS`..`TAU4_PS`). They default to 0 and are built from a behavioural
`route_delay` helper. Flip-flop setup time is zero in simulation, so "in
time" means strictly before the clock edge.

Worked example, at the reference operating point: `T` = 2500 ps (400 MHz),
node slack 128 ps, routing delays 0. Tap 2 of the line delays by 60 ps, so
`DC_th` = 68 ps. A 100 ps change is flagged, and FF1 still samples
correctly. A 40 ps change is not flagged.

## The carry-chain delay line (`adl`, `carry4`)

An FPGA has no delay cells, but its fast carry chain is a dense row of equal
multiplexer stages. The design uses it as a tapped delay line, as FPGA
time-to-digital converters do. `carry4` models one slice's carry block.
It has four carry multiplexers (`CO[i] = S[i] ? c[i] : DI[i]`) and four sum
outputs (`O[i] = S[i] ^ c[i]`), with `c[0] = CI | CYINIT`. `adl` chains
`N_CARRY4` of these blocks (default 2) with every `S` high, so an edge on
`din` ripples down the multiplexers.

Every carry stage gives two taps: its sum output, re-inverted because the
XOR with `S = 1` inverts, and its carry output. The taps are numbered in
order of arrival:

    tap 2j   = ~O[j]     tap 2j+1 = CO[j]       (j = stage 0 .. 4*N_CARRY4-1)
    delay(tap k) = 20 ps * (k + 1)

The model's stage delays (40 ps per multiplexer, and a sum output 20 ps
after its stage's carry input) are chosen so that successive taps are the
~20 ps apart quoted for a 65 nm device. `tap_sel` picks the tap. In an FPGA
this is a static choice made when the monitor is placed. Here it is a port,
so one netlist can hold monitors with different thresholds. The tap
multiplexer adds no delay in the model. In a real device its delay is
part of the fixed routing terms.

**Synthesis caveat.** The delays in `carry4` and `route_delay` exist only
in simulation. Synthesis reduces the delay line to a wire and a multiplexer.
To build the monitor in a device, replace `carry4` with the vendor's
carry primitive, and lock the chain and both flip-flops in place with
placement constraints. Then calibrate the tap delays with static timing
analysis at the process/voltage/temperature corners of interest. The
described implementation reports about 20 ps per carry output.

## Twelve monitors on one node: measuring cumulative changes

A single threshold only tells whether a change exceeded `DC_th`. Put `N`
monitors with staggered taps on the same node and the set of flags becomes
a thermometer code of the change. Monitor `m` with tap `k(m)` fires when

    DC > slack - tau_ADL(k(m))        (routing delays 0)

Each further upset on the same net adds to the delay already there. More
and more monitors fire, so first, second and third changes can be told
apart and each one bracketed between two thresholds. `sdc_test_system`
instantiates `N_MON` = 12 monitors, each with its own `tap_sel[m]`. The
end-to-end test uses a node slack of 300 ps and taps 0..11. That gives
thresholds of 280, 260, ... 60 ps, and it checks that changes of 71, 131
and 191 ps light exactly monitors {11}, {8..11} and {5..11}.

## The test system around the monitors (`sdc_test_system`)

```
 clk_100mhz --> pll_clkmux --sys_clk--+--> lfsr (64 bit) --> sut_out ==> [fabric path] ==> sut_in
 reset ------>  (CLK_IN, RESET_PLL,   |                                                    |
                 SELECTION_CLK,       +--> sdc_monitor x N_MON <----------------------------+
                 LOCKED)              |          | sdc_flag[N_MON-1:0]
                   ^                  |          +--> OR --> sdc_flag_any
                   |                  +--> clk_sel_dff (D=1, EN=sdc_flag_any) --> clk_sel
                   +--------------------------------------------------------------------+
 reset | ~locked --> sync_rst (on sys_clk) --> sync_reset --> lfsr, monitors, clk_sel_dff
```

* **`pll_clkmux`** is a behavioural model of the PLL. It locks after 8
  reference cycles. It then produces 400 MHz (2500 ps), or, while
  `selection_clk` is high, the reduced frequency (200 MHz by default). The
  output is aligned to the 100 MHz reference. A frequency change takes
  effect at the next reference edge, and there are no short pulses.
  Half a reference period must be a whole number of output periods.
* **`clk_sel_dff`** is a flip-flop with its data input tied high and the
  SDC flag as clock enable. The first flag therefore switches the system
  to the reduced frequency and keeps it there. Halving the frequency
  doubles every slack: what was `slack > DC_th` at full speed becomes
  `slack > 2 DC_th`. A second change of the same size then causes no
  fault. Only a reset returns to full speed. In the real system that reset
  comes after the affected configuration has been repaired and the state
  restored.
* **`sync_rst`** asserts `sync_reset` at once, from `reset` or from an
  unlocked PLL, and releases it on the second `sys_clk` edge after that.
* **`lfsr`** is a 64-bit Fibonacci LFSR (x^64 + x^63 + x^61 + x^60 + 1)
  with a fixed seed. Its top bit is the signal under test. It toggles on
  about half the cycles, in a pattern that never repeats in practice.
* **The fabric path** is the FPGA routing between the LFSR and the
  monitors, where the upsets happen. It is not logic, so it is outside the
  module: `sut_out` leaves, `sut_in` comes back. The testbenches model it
  as a transport delay, `sut_in <= #(path_ps) sut_out`, and inject delay
  changes by raising `path_ps`.
* `endpoint_q` is monitor 0's FF1, which is the node's functional end point.

All registers run on `sys_clk`. A late launch at edge *n* shows on
`sdc_flag` after edge *n+1*. `clk_sel` is set at edge *n+2*, and the next
reference edge starts the slow clock.

## Simulating

All files use `` `timescale 1ps/1ps ``, and the delay models need
Verilator's timing support. Each testbench is self-checking. It prints one
line `TB_RESULT checks=N failures=M` and stops itself with a watchdog if
something hangs. For example:

    verilator --binary --timing --top-module tb_sdc_test_system \
        -y rtl -y tb +libext+.sv -Irtl rtl/sdc_pkg.sv tb/tb_sdc_test_system.sv
    ./obj_dir/Vtb_sdc_test_system

| testbench | what it shows |
|---|---|
| `tb_carry4` | logic function of the carry block; arrival time of all 8 outputs |
| `tb_adl` | delay of every tap, rising and falling, is 20*(k+1) ps |
| `tb_sdc_monitor` | per-cycle FF1/FF2/flag against an arrival-time model, for all 16 taps and several arrival times, with and without routing delays; detection of an injected change |
| `tb_lfsr` | 1000 cycles against the polynomial; full 255-state period of an 8-bit instance |
| `tb_sync_rst`, `tb_clk_sel_dff`, `tb_pll_clkmux` | reset timing; sticky selection; lock, both periods, switching |
| `tb_sdc_injection` | full system at its default size: 128 ps slack, 100 ps change injected at 576 ns; flag latency exactly one period; which monitors fire; switch to reduced frequency |
| `tb_sdc_test_system` | full system at its default size: no false flags, LFSR and end-point data, first/second/third cumulative changes, clock switch, reduced-frequency operation, return to full speed; a further 150 ps change absorbed in reduced mode without data errors; the same total delay at full speed giving an unflagged delay fault; each mechanism is counted |

Simulation uses two-state logic with random power-up values. An
asynchronous reset must therefore see a real rising edge, and the
testbenches drive it low, then high.

Package `sdc_pkg` holds the shared numbers: clock periods, the 128 ps
reference slack, tap step, delay-line size, monitor count, LFSR polynomial
and seed. It also has `adl_tap_delay_ps(k)`, the expected delay of a tap.

## What follows the published design and what is this design's choice

Taken from the description:

* the two-flip-flop monitor with the delay line in one branch and a flag
  when the samples differ;
* the threshold relation with routing delays `tau1`..`tau4`;
* a delay line built from the carry chain, using both its sum-type and its
  carry-multiplexer outputs, about 20 ps per output;
* 400 MHz system clock from a 100 MHz reference;
* a 64-bit LFSR as the signal source;
* a flag-enabled flip-flop driving the PLL's clock selection, and a reset
  synchroniser;
* twelve monitors with different thresholds on one node;
* 128 ps slack at the reference operating point.

This design's own choices:

* the delay line's length (2 carry blocks, 16 taps), the tap order, and
  the split of the model's delays between multiplexer and sum gate;
* the re-inversion of the sum taps. The published text calls these taps
  OR-gate outputs; the vendor primitive has an XOR there, and that is
  what is modelled.
* `tap_sel` as a port instead of a build-time constant;
* reset polarity, asynchronous resets, and the LFSR polynomial and seed;
* the reduced frequency (half rate), the PLL lock time, and the switching
  instant;
* the OR of all twelve flags driving the selection flip-flop (the
  published circuit shows one monitor);
* the selection flip-flop being cleared by the synchronised reset;
* `sync_rst` being held while the PLL is unlocked, with two stages. The
  published drawing shows a VCC tie next to the synchroniser; this design
  shifts in a low level, so that the released reset is low.
* zero routing delays and zero setup time by default.

Not modelled:

* the radiation-induced delay itself (it is a testbench delay);
* the configuration-memory fault injector that flips configuration bits
  and reports their frame address over a UART;
* the on-chip logic analyser used to watch the flag;
* the sorting of detected changes into first/second/third-change trees.
  That is analysis of logged flags, not hardware.

The monitor's load on the node it watches (a few tens of picoseconds in
the published measurements) is a property of placement and cannot be
represented here.
