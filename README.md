# A latch-based clock that stretches itself during supply droops

When the core supply of a chip droops, its logic slows down. A clock running
at the nominal frequency then has too short a period, and timing fails. This
design removes that risk. It lowers the clock frequency **within one to two
clock cycles** of a droop being detected. It does this with no PLL, using
only latches, flip-flops, gates and fixed delay lines.

The difficulty is that "a droop is happening" is an analog fact. Turning it
into a digital bit can leave a sampling element metastable. The usual remedy
is a synchroniser chain, but that adds several cycles of latency, which is too
slow for fast droops. This design does not wait for synchronisation. Each
synchroniser stage also sits in the clock path. A stage acts on its sample at
once by delaying the clock edge by a quarter period. It then hands the sample
to the next stage, which keeps delaying edges until the last stage makes the
delay permanent. The sample may still be unresolved while the stages act on
it. Special *masking latches* make sure an unresolved sample can only ever
cause "some extra delay, between none and a quarter period". It can never
cause a glitch, and never a delay that a later edge takes back.

Numbers used throughout:

| quantity | value |
|---|---|
| input clock `clk_in` | 400 MHz (period T/2 = 2.5 ns) |
| output clock `clk_out` | 200 MHz nominal, T = 5 ns |
| period during a droop | 5T/4 = 6.25 ns for each cycle in which a droop was sampled |
| output high time | 9T/20 = 2.25 ns (set by the last pulse shaper) |
| droop signal polarity | active low: 0 = droop |

All delays live in `rtl/droop_pkg.sv` as fractions of `T_PS`.

## The chain

```
             clk[0]          clk[1]          clk[2]          clk[3]          clk[4]
 clk_in ─o─> phase     ───>  delay     ───>  delay     ───>  delay     ───>  delay     ───> clk_out
             accumulator     element 1       element 2       element 3       element 4
    g_in <── e[0] <───────── e[1] <───────── e[2] <───────── e[3] <───────── e[4] <──── droop detector
                                                                                        (detect_out)
```

The droop detector drives the rightmost delay element, the one that produces
`clk_out`. Every cycle, each element samples its droop input during a short
window after its clock rises. If the sample is 0, the element delays its
*next* rising output edge by T/4. The element also passes the sample to the
element on its left, which does the same one cycle later. After four cycles
the sample reaches the phase accumulator. The phase accumulator does not delay
one edge. It moves its output to a clock phase a quarter period later, for
good. From then on every edge is T/4 later than before, so the one-cycle
delays of the elements are no longer needed.

Take one cycle with a droop sample. Element 4 delays edge k+1 by T/4.
Element 3 delays edge k+2. The elements each hand the delay on, and the
phase accumulator's phase step holds it from then on. The only period that
grows is the first one, from T to 5T/4. Several droop cycles in a row stretch
several periods, one for each cycle.

## Masking latches

These are the parts that make the scheme safe. They are full-custom cells in
silicon. Here they are behavioural models (`mc_latch_core`, `mask0_latch`,
`mask01_latch`).

A masking latch is a D latch with a synchroniser-grade storage loop. Its
output inverters are replaced by a **differential sensor**. The sensor's
transistors conduct only when the two storage nodes are well apart. While
the loop hangs at mid-rail, both sensor outputs are forced to the same level:

* **Mask-0 latch** (`q0`, `q0_n`): both outputs read 0 while metastable.
  Afterwards they take the resolved value (`q0 = Q`, `q0_n = not Q`).
* **Mask-01 latch**: also provides `q1 = not q0_n` and `q1_n = not q0`. While
  metastable, the 0-masked pair reads 0 and the 1-masked pair reads 1.

So an output never sits at a mid level. It shows the masked value, and then
at most one late clean edge when the loop resolves. The metastability model
is as follows:

* A data change less than `SETUP_PS` (20 ps) before the latch closes leaves
  the loop unresolved.
* It resolves after `tau * (1 + ln(20 ps / dt))`, where tau = 108 ps and dt
  is how far before the closing edge the data changed.
* It settles to a random value.
* Opening the latch again, or resetting it, ends metastability at once.

Only tau comes from the source design. The window, the resolution law and the
30 ps output delay are this model's assumptions.

## Delay element (`delay_element`)

### Clock path

The input clock is first delayed by a small delay (`SMALL_PS`, 100 ps) to give
`clk_d`. From there it takes two paths:

* **fast:** `fast_n = NAND(clk_d, fast_en)`;
* **slow:** `clk_d` goes through a T/4 delay line, an inverter and another
  small delay, giving `clk_t4_n`.

The two paths meet in the "path combining" NAND:
`comb = NAND(clk_t4_n, fast_n)`.

* With `fast_en = 1`, `comb` rises with `clk_d`. The pulse is T/4 longer than
  the input pulse, because `clk_t4_n` holds it up.
* With `fast_en = 0`, `comb` rises only when `clk_t4_n`'s falling edge arrives.
  The edge is delayed by T/4 + 100 ps.

A **pulse shaper** follows. It cuts every pulse to the fixed high time, so the
output rises 600 ps or 1950 ps after the input does.

### Synchroniser path

`clk_gated = clk_t4_n AND clk_in` is high for about T/4 after each input rise.
This is the sampling window.

* The first stage is a **Mask-01 latch**. It is transparent during the window
  and samples `e_in`.
* Two second-stage latches are transparent outside the window:
  * a **plain D latch** takes the 0-masked output `q0` and drives `e_out`;
  * a **Mask-0 latch** takes the 1-masked output `q1` and drives `fast_en`.

### If the first stage goes metastable

* `q1` reads 1. The next edge is not delayed unless the latch resolves to 0,
  in which case `fast_en` falls late. A late fall only moves the edge to a
  point between the fast and slow timings.
* `q0` reads 0. The droop is handed on to the left in any case, unless the
  latch resolves to 1 in time. In that case the current edge was not delayed
  either.

The element can therefore never delay an edge and then fail to keep the later
edges delayed. The second-stage latches have most of a cycle to settle, so
their own chance of going metastable is negligible.

### Timing the testbench checks

| sample of the previous cycle | `clk_out` rise after `clk_in` rise |
|---|---|
| 1 | 600 ps (small delay + T/10 trim) |
| 0 | 1950 ps (T/4 + 100 ps more) |

`e_out` carries the sample one cycle later.

## Phase accumulator (`phase_accumulator`, `gray_counter`)

The 400 MHz input is divided by two in two toggle flip-flops, one on each input
edge. Together with their inverses they give four 200 MHz phases, exactly T/4
apart. Because they are derived this way, they need no delay line and no PLL to
keep them accurate. A 4:1 multiplexer selects one phase as the output clock.

Each cycle, a D latch captures the droop input while `clk_out` is low. The
counter reads that latch on the falling output edge. A 0 makes it advance one
step. A T/3 delay later the multiplexer switches to the next phase. At that
moment both the old and the new phase are low, so the switch cannot glitch. The
cycle's low time simply grows by T/4.

A 2-bit Gray counter (00, 01, 11, 10) guarantees that only one select bit moves
per step. The multiplexer inputs are wired Phase 0, 1, 3, 2 so that this
sequence walks through the phases in order.

The chip's `clk_in` reaches the accumulator inverted.

## Pulse shaper (`pulse_shaper`)

The shaper has three gate-plus-delay stages:

1. **Trim.** `s1 = in AND in delayed by T/10`. This removes short stray pulses
   and delays the edge by T/10.
2. **NAND1.** `n1 = NOT(s1 AND NOT(s1 delayed by D1))` is a low pulse of width
   D1 at each rising edge.
3. **NAND2.** `out = NOT(n1 AND n1 delayed by D2)` goes high at n1's fall and
   low D2 after n1 recovers.

The output high time is therefore D1 + D2, whatever the input duty cycle.

The textbook version uses D1 = T/3 and D2 = T/6, for a high time of T/2. That
fails for the 3T/4-wide pulses a fast-path element produces. The built design
shortened the delays to **T/4 and T/5**, which are the defaults here.

## Droop detector (`droop_detector`)

The detector is a small macro with two buffer lines, both fed by `clk_in`:

* a reference line of x + 2 buffers on the normal supply (x = 5 here);
* a test line of x buffers on an adjustable supply, `test_droop_vdd_mv`.

Two flip-flops compare the line ends. *Detect* samples the test line on the
reference line's edge. *Calibrate* samples the reference line on the test
line's edge.

At nominal supply, the test edge arrives two buffer delays early, so
`detect_out = 1`. When the test supply droops far enough, the test line
becomes the slower one and `detect_out` drops to 0. That 0 is the active-low
droop signal that drives the chain.

Buffer delays follow a simple law: BUF_PS × (1200 − 400) / (V − 400) mV. This
law is this design's own. With it the threshold is about 971 mV.

## What is synthesizable and what is a model

* **Synthesizable logic:** `d_latch`, `gray_counter`, and the gates and
  flip-flops in `phase_accumulator`, `delay_element`, `pulse_shaper` and
  `droop_response_top`. The latches are intended. Lint tools will report them
  as latches.
* **Behavioural models:**
  * `delay_line` and `supply_buffer` model long-delay buffer cells. They are
    ideal transport delays: every edge is queued, so pulses shorter than the
    delay survive.
  * The masking-latch cells and the detector macro are also models.

The models use `#` delays and queues, as any timing-accurate model of these
circuits must. A real implementation replaces them with library cells and
keeps the delay cells out of optimisation.

Two modelling details matter when changing the code:

* The phase accumulator's D latch is followed by a 50 ps delay
  (`LATCH_PROP_PS`). The counter samples the latch on the same edge that opens
  it. In silicon the latch's own propagation delay makes the counter read the
  old value. In a zero-delay simulation the two would race.
* All delay lines start at 0. Right after time 0, the pulse shaper emits one
  pulse of width D2 before things settle. The testbenches ignore the first
  5 ns.

## Choices this design makes where the source design is silent or inconsistent

* **T = 5 ns (200 MHz).** One caption of the source design mentions 50 ns. The
  200 MHz clock is used wherever frequencies are given.
* **Small delay of 100 ps.** A delayed edge is therefore late by T/4 + 100 ps
  (1350 ps), while a phase step is exactly T/4. On the cycles where a droop
  passes from the elements to the phase accumulator, periods differ from T or
  5T/4 by up to ±100 ps. The end-to-end test allows ±110 ps there.
* **Path-combining gate.** It is described once as an AND and otherwise as a
  NAND. NAND is used.
* **Detector output polarity.** The description of the detector's outputs
  contradicts its schematic. The schematic's wiring is followed, which makes
  `detect_out` active low as the chain needs.
* **Reset.** All latches, flip-flops and the counter reset to 0 through one
  active-low `rst_n`. After reset, the accumulator's second toggle flip-flop is
  released only after the first has toggled once, so the phases are always in
  order. The reset reaches the phase accumulator through a latch that is
  transparent while the accumulator's output clock is low. The source design
  specifies this latch. Making the reset also clear that latch, so that
  assertion acts at once, is this design's choice. Because every latch starts
  at 0, the first edge after reset is delayed by all four elements.
* **Metastability model constants** (window, resolution law, output delays), as
  described above.
* **Detector size and delays.** The detector uses x = 5 and 100 ps buffers, with
  the supply-delay law above.

The chip's analog pads and padring have no logic function and are not modelled.
The detector's analog supply appears as the integer port `test_droop_vdd_mv`.

## Simulating

Every testbench in `tb/` checks itself. Each ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
t=tb_droop_response_top
verilator --binary --timing --assert -Wno-fatal -Mdir obj_$t \
    rtl/droop_pkg.sv tb/$t.sv -y rtl -y tb --top-module $t -o sim
./obj_$t/sim
```

| testbench | what it checks |
|---|---|
| `tb_d_latch`, `tb_gray_counter`, `tb_delay_line` | random stimulus against reference models |
| `tb_mc_latch_core`, `tb_mask0_latch`, `tb_mask01_latch` | stored value with stable data; forced window violations (masked levels, resolution time between tau and tau(1 + ln 20), both outcomes, at most one late edge) |
| `tb_mask01_tau` | metastability analysis: resolution delay against ln(dt) for dt = 1..19 ps, straight-line fit must return tau = 108 ps within 2 % (it gives 107.9 ps) |
| `tb_pulse_shaper` | input high times from 3T/4 down to 9T/20: edge delay exactly T/10, high time exactly 9T/20 |
| `tb_phase_accumulator` | random droop input: each 0 stretches exactly the next period to 5T/4, high time T/2, all four phases used |
| `tb_delay_element` | clean random samples (600/1950 ps edge delays, `e_out` one cycle later, 2250 ps high time), then forced metastability of the first stage (delays only 600 or 1950 ps, a delayed edge always goes with a droop passed on) |
| `tb_droop_detector` | output levels across test supplies above and below the threshold |
| `tb_droop_response_top` | whole design at default parameters |
| `tb_droop_response_slow_clock` | the same at a 10 % slower input clock (output period 5.5 ns). The phases and the phase step follow the clock, while the delay lines keep their nominal lengths. This is how the design trades frequency for tolerance to delay variation. |

`tb_droop_response_top` applies four supply dips: 60 ns at 900 mV, 6 ns at
850 mV, 40 ns at 1050 mV (too shallow to count as a droop) and 150 ns at
700 mV. It checks the following:

* Every output period is T, or 5T/4 in droop cycles, within ±110 ps.
* The high time is constant.
* The reset is held and then released through the reset latch, and the first
  edge after reset takes the slow path in all four elements (4 × 1950 ps).
* The number of stretched periods equals the number of phase-accumulator
  steps.
* Every mechanism occurs at least once: detector trips, slow paths in each
  element, fast-path recovery, and phase steps.

It runs in well under a second.

The tools report some lint warnings, which are deliberate:

* latches (intended), and for one latch instance in the flattened design the
  opposite report that no latch was found;
* run-time delay values in the behavioural models;
* package constants reported unused when the package is checked alone;
* the reset used both asynchronously and in an assertion;
* complementary latch outputs that no one reads.
