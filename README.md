# Vernier-clock time interval generator

This design makes two pulses whose time separation can be set in steps far
below a gate delay, with nothing but counters and comparators. It needs two
clocks from the same oscillator whose frequencies differ by a tiny known
ratio, here f1/f2 = 4095/4096. Each clock drives its own counter, and each
counter fires a pulse when it reaches a programmed constant: `EQN1x` when
CNT1x = N1 and `EQN2x` when CNT2x = N2. Suppose both counters are started
together. Moving N1 and N2 up together by one then shifts the second pulse
against the first by the difference of the two clock periods,
1/f1 − 1/f2. At 320 MHz that step is 0.763 ps; at 250 MHz it is 0.977 ps.
Moving N2 alone by one shifts it by a whole fast period (3.125 ns at
320 MHz). Since the step is a difference of two periods, it does not depend
on temperature or supply voltage. Delay-cell schemes drift with both, and
their steps are 15 to 20 ps.

The RTL here covers the whole chain of the published FPGA design. It runs
from the reference clock through a two-stage PLL cascade (as a behavioural
model), counter alignment, constant transfer and comparators, plus the test
sequencer that stepped the generator through 16 settings. Everything
simulates with plain Verilator.

## The interval equation

Let both counters be loaded with 4096 on a common instant t0. Then (P1 = 1/f1,
P2 = 1/f2)

    T1 = t0 + (N1 + 1 - 4096) * P1
    T2 = t0 + (N2 + 1 - 4096) * P2

    T2 - T1 = (N2 - N1) * P2  -  (N1 + 1 - 4096) * (P1 - P2)
              \__ coarse __/     \________ fine __________/

The `+1` is the comparators' output register: each pulse starts one clock
after the counter reaches its constant. It changes the published equation
only by one fine step. In this implementation the slow counter is loaded
ε = 2 to 3 fine steps (1.5 to 2.3 ps) after the fast one. That makes every
interval shorter by ε, the same ε for all settings, and ε changes only when
the generator is re-initialized. Like the PLL-induced offsets seen on real
hardware, ε is a constant calibration term.

Worked numbers (320 MHz, from simulation of the full design):

| N1   | N2   | T2 − T1 measured | equation without ε |
|------|------|------------------|--------------------|
| 4096 | 4097 | 3122.709 ps      | 3124.237 ps        |
| 4128 | 4129 | 3098.288 ps      | 3099.817 ps (−32 fine steps = −24.42 ps) |
| 4384 | 4385 | 2902.928 ps      | 2904.457 ps (−256 fine steps = −195.4 ps) |
| 4384 | 4411 | 84152.926 ps     | 84154.457 ps (+27 coarse steps) |
| 7274 | 7275 | 697.491 ps       | 699.023 ps (first sequencer entry) |

## Counters and the vernier frame

Both counters are 13 bits. Twelve would be enough for the 4095/4096 ratio;
the extra bit lets N2 − N1 reach about 8000 coarse steps, about 25 µs. The
count ranges differ on purpose:

* CNT2x, fast clock: 0 … 8191, 8192 states.
* CNT1x, slow clock: 1 … 8190, 8190 states.

8190 slow periods last exactly as long as 8192 fast periods, because
8190 · 4096/4095 = 8192. So after being set to 4096 together, both counters
read 4096 together again at the end of every *frame* of 8190 slow periods
(25.6 µs at 320 MHz). Within a frame each output pulses exactly once, and
the pattern repeats frame after frame without any drift. N1 must lie in
1…8190 (CNT1x never holds 0 or 8191), N2 in 0…8191. Constants below 4096
are reached after the wrap, later in the same frame, and the equation above
still holds modulo one frame. Each pulse is one clock period wide.

## Starting the counters on aligned edges (`align_init`)

The equation needs the two counters loaded on (nearly) the same instant, and
the two clocks are asynchronous in practice. The published description only
says that they are set to 4096 "when the clocks are approximately aligned".
This design finds such an instant with the vernier principle itself:

1. On every rising edge of the fast clock, the slow clock's level is sampled
   as data (`smp`). Each fast cycle, the slow clock's edges slip one fine
   step later relative to the fast clock's edges. The sample therefore reads
   1 while a slow rising edge is shortly *before* the fast edge. It turns to
   0 on the first fast edge `k0` that the slow rising edge `j0` has slipped
   behind, and `j0` then lags `k0` by at most one fine step.
2. Once armed, the first 1→0 step of the sample sets a one-cycle flag in the
   fast domain on edge `k0+1`. The fast counter is loaded on edge `k0+2`.
3. The slow domain samples that flag on the *falling* edge of the slow
   clock, half a period away from any fast edge, so there is no setup or hold
   race. The slow counter is loaded on its edge `j0+2`.

Both loads happen on the same edge index after the aligned pair. The slip
grows by one fine step per cycle, so the load edges are 2 to 3 fine steps
apart (ε above). Alignment completes within one frame of `init` rising, and
`aligned` then stays high until the next `init`.

On an FPGA, the path from the slow clock net into the sampling flop must be
routed as a data path, and the falling-edge flop needs a half-period
constraint. Both are normal for this kind of phase detector, but they need
attention in the constraint file.

## Clocks: the PLL cascade (`cascaded_pll`, `pll_stage`)

An integer PLL's VCO range does not allow a 4095/4096 ratio in one stage.
The ratio factors as 4095/4096 = (63·65)/(64·64), so the factors can be
split over a first PLL and two second-stage PLLs. Each PLL gives
f_out = f_in · M / (N · C).

Cyclone 10 set-up, the default (`tig_pkg::PLL_CFG_C10`, 40 MHz reference):

| PLL    | input  | N | M   | C   | output |
|--------|--------|---|-----|-----|--------|
| PLL601 | CK40   | 4 | 105 | 105 | CK10, 10 MHz |
|        |        |   |     | 4   | CK262, 262.5 MHz |
| PLL605 | CK10   | 1 | 128 | 4   | CK320 = ck2x, 320 MHz |
| PLL604 | CK262  | 8 | 39  | 4   | CK319 = ck1x, 319.921875 MHz |

Cyclone 5 set-up (`tig_pkg::PLL_CFG_C5`, 50 MHz reference): PLL402
(N 3, M 64, C 7) makes CK152 = 152.38 MHz. From CK152, PLL414 (13, 64, 3)
makes CK251 = ck2x = 250.061 MHz and PLL413 (16, 105, 4) makes
CK250 = ck1x = 250 MHz. The fine step is then 0.977 ps.

The PLLs are analog, so `pll_stage` is a behavioural model (delays and real
time, not synthesizable). It averages the reference period over 1024 cycles,
then starts its outputs on a reference edge. It accumulates edge times in
real arithmetic and rounds each edge to the femtosecond, so the modelled
cascade keeps the 4095/4096 ratio to about one part in 10^10.
It models no jitter: the real PLL outputs show about 22 ps of jitter per
edge, which is why measurements of the real device are averaged over many
frames. It also models no interaction between PLLs; offsets of up to ±10 ps
have been seen on real devices and attributed to coupling through the shared
analog supply. `vernier_tig_top` instantiates this model, so it simulates as
a whole. For an FPGA build, replace `cascaded_pll` by the vendor PLL
instances with the dividers above.

## Carrying the constants across (`const_reg`)

N1 and N2 are written in a slow control clock domain. Each vernier domain
has its own constant register: the register holds the comparator's B input
steady and changes it only on its own clock edge. The comparator therefore
never sees a half-changed constant and never fires a stray pulse. Transfer
protocol (this design's choice):

* The control side puts the new value on `n1`/`n2`, then raises `n_load`.
* `n_load` passes a two-flop synchronizer in each domain, and while it is
  high each register copies its input. The value is in the register on the
  third clock edge after `n_load` rises.
* The control side must keep `n1`/`n2` unchanged until at least three
  vernier clocks after `n_load` falls. The sequencer holds them for the
  whole dwell.

The two channels take the new constants on edges that are a few cycles apart.
So for up to one frame after a change, one output may still show the old
setting.

## Sequencer (`tig_sequencer`)

For the published measurements, firmware stepped through 16 pre-determined
intervals and held each for about 429 s, so that an oscilloscope could
average thousands of acquisitions per point. `tig_sequencer` does this on
the slow control clock:

* It presents entry `idx` and raises `n_load` for 8 clocks.
* It holds the entry for a total of `DWELL_CYCLES` clocks per entry. The
  default, 17 160 000 000, is 429 s at 40 MHz.
* It moves to the next entry, and wraps after the 16th.

The published values of the 16 settings are not known, only that they were
32 to 256 fine steps apart (24.2 to 195.3 ps). The default table
(`tig_pkg::DEFAULT_TABLE`) therefore uses N2 − N1 = 1 with N1 from 7274 down
to 5482, in steps of 256, 128, 96, 64 and 32. That gives set intervals from
about 0.7 ns to 2.07 ns. `seq_enable = 0` hands N1/N2 to the external slow
control ports instead.

## Top level (`vernier_tig_top`)

| port | dir | width | meaning |
|------|-----|-------|---------|
| `ck_ref` | in | 1 | reference clock (40 MHz); also the slow control clock |
| `rst_n` | in | 1 | asynchronous reset, released per domain by `rst_sync` |
| `init` | in | 1 | rising edge starts counter alignment |
| `seq_enable` | in | 1 | 1: sequencer drives N1/N2; 0: the `*_ext` ports do |
| `n1_ext`, `n2_ext` | in | 13 | constants from external slow control |
| `n_load_ext` | in | 1 | load enable for the constant registers |
| `eqn1x`, `eqn2x` | out | 1 | the two output pulses (differential SSTL pads in the FPGA) |
| `aligned` | out | 1 | counters have been initialized |
| `pll_locked` | out | 1 | PLL cascade running; the core is held in reset until then |
| `ck1x`, `ck2x`, `cnt1x`, `cnt2x`, `seq_idx`, `seq_step` | out | | observation |

Parameters: `PLL_CFG` (default `PLL_CFG_C10`), `SEQ_TABLE` and
`DWELL_CYCLES`.

Hierarchy:

    vernier_tig_top
      cascaded_pll      (behavioural: pll_stage x3)
      rst_sync          (slow control domain)
      tig_sequencer
      tig_core
        rst_sync x2     (one per vernier domain)
        align_init
        rot_counter x2  (CNT1x 1..8190, CNT2x 0..8191)
        const_reg x2
        eq_cmp x2

`tig_pkg` holds the widths, count ranges, the setting and PLL types, the
default table and both PLL configurations.

## Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`.
Run them from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
        rtl/tig_pkg.sv tb/tb_vernier_tig_top.sv --top-module tb_vernier_tig_top -o sim
    ./obj_dir/sim

All files declare `timeunit 1ps; timeprecision 1fs;`, which is fine enough
to resolve the 0.763 ps step. Verilator warns `ZERODLY` about the computed
delays in the PLL model; the warning is harmless.

| testbench | what it checks |
|-----------|----------------|
| `tb_vernier_tig_top` | The whole design at default parameters, from the 40 MHz reference: PLL lock, alignment, intervals for external settings, fine steps of 32 and 256, coarse steps, N2 − N1 from 0 to 27 (up to 84 ns), and the sequencer's first entry. Every interval is checked against the equation, and every step to within 10 fs. The test counts each mechanism and fails one that never happened. Runs in under a second. |
| `tb_workload_scan` | The 16-point fine-step scan, end to end, on two complete generators: Cyclone 10 (320 MHz) and Cyclone 5 (250 MHz), with a shortened dwell. Every point is checked against the equation and every spacing to within 10 fs; prints set time against measured time per point. |
| `tb_tig_core` | The core with ideal clocks: intervals, exact fine and coarse step sizes, constants below 4096, negative intervals, one pulse per frame, pulse width. |
| `tb_align_init` | The load edges come once per arm, slow edge 2 to 3 fine steps after the fast one, within one frame. Repeated from several phases. |
| `tb_rot_counter` | Both count ranges, wraps and synchronous sets against a reference sequence. |
| `tb_const_reg` | Three-edge transfer latency, hold while `en` is low. |
| `tb_eq_cmp` | Registered equality on random and equal vectors. |
| `tb_tig_sequencer` | Table order, load-pulse length, dwell spacing, wrap, disable (with a 50-clock dwell). |
| `tb_cascaded_pll`, `tb_pll_stage` | Output periods of both cascades, and 8190 slow periods = 8192 fast periods. |

The full 429 s dwell cannot be simulated. At default parameters only the
sequencer's first entry runs; all 16 entries and the wrap run with a short
dwell. In long runs the modelled intervals drift by a few femtoseconds per
millisecond, because the PLL model measures its reference period to finite
precision. That drift is far below the fine step.

## What follows the published design and what is added

Taken from the published design:

* the two-counter / two-comparator scheme and the interval equation;
* 13-bit counters with ranges 1…8190 and 0…8191, set to 4096 together;
* a constant register per domain in front of a clocked A=B comparator;
* the PLL dividers and frequencies of both cascades;
* the 16-point sequencer and its 429 s dwell.

Choices of this design, where the published description gives no detail:

* the alignment detector and its 2-to-3-step load skew;
* the synchronizer and hold rule of the constant registers, and one load
  enable shared by both;
* reset behaviour: asynchronous reset, counters reset to 4096, constants to
  0, core held in reset until the PLLs lock;
* the sequencer's table values, its 8-clock load pulse, its wrap-around, and
  a 40 MHz slow control clock;
* the external slow-control ports and the mux between them and the sequencer.

Points to keep in mind:

* The comparators are registered, as in the block diagram. Each pulse
  therefore comes one clock after the counter match; the equation above
  includes this.
* The overview figure shows a 12-bit example in which the counters realign
  every 4095 slow periods. The implemented 13-bit counters realign every 8190.
* The Cyclone 5 block diagram prints a second-stage VCO frequency
  (784.3 MHz) that does not follow from its printed dividers (750.2 MHz).
  The output frequency it prints (250.061 MHz) does follow from them, and
  the model uses the dividers.
* The step at 320 MHz is 0.763 ps. The headline figure of 0.67 ps quoted
  for this design matches neither configuration.
* Jitter, output pads and the oscilloscope-side averaging are outside the
  RTL.
