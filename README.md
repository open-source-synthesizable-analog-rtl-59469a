# A 20 GS/s time-interleaved ADC and a 5 GHz phase interpolator from standard cells

This is a high-speed-link receiver front end. The analog-to-digital converter
and the clock phase interpolator are built almost entirely from digital gates.
No circuit in the design needs precise device matching.

- **ADC.** The input voltage is turned into a time interval. The interval is
  measured by counting how many edges of a badly matched inverter chain fall
  inside it. Random mismatch spreads those edges evenly, so it acts as the
  quantizer.
- **Phase interpolator (PI).** A chain of plain delay cells is measured
  against the clock period. The PI then selects and blends two neighbouring
  chain taps to place its output edge anywhere in the period.

Sixteen converter slices at 1.25 GS/s each, clocked by four interpolated
5 GHz phases, give 20 GS/s with 8-bit codes.

The SystemVerilog here models that chip at the block level:

- The digital parts are synthesizable RTL.
- Each analog part (sampling switch, voltage-to-time converter, inverter
  delays, phase mixing, bias voltage) is an event-driven behavioural model.
  It has the real block's ports and uses `real` voltages and real-valued
  delays.

The models let the whole system be simulated end to end with an ordinary
event-driven simulator.

## 1. The converter slice

A slice (`adc_slice`) turns a differential voltage into a signed 8-bit code
every 800 ps. The signal flows through these stages in order:

```
vin_p --[V2T]-- t_inp --\                     +-- sign ----------------------+
                         [phase folder]--p_in-[STDC counter]--count--[unfolder]-- adc_out
vin_n --[V2T]-- t_inn --/                          ^                    ^
                                                 phi[254:0]          offset
                              clk_div --[255-inverter line]          [offset loop]
```

### 1.1 Voltage to time (`v2t`, `v2t_clkgen`)

Each side of the differential input has its own V2T.

1. **Sample.** The V2T samples its input onto a capacitor during phase φ1.
2. **Discharge.** During φ2, a current source discharges the capacitor.
3. **Fire.** The output edge `t_in` rises when the capacitor voltage crosses
   the threshold of a low-threshold gate.

The edge time is therefore linear in the sampled voltage. The *difference*
between the two sides' edge times is proportional to the differential input.

The model's numbers are its own, not published ones:

- the capacitor voltage falls at 0.8 mV/ps at the nominal bias;
- the gate threshold is 0.30 V;
- the common mode is 0.55 V.

The discharge slope scales with (vbias − 0.2 V), which is how the bias
generator sets the converter's gain.

`v2t_clkgen` divides the slice clock by 4. From the same counter it makes:

- φ1, high for one clock period in four;
- φ2, the complement of φ1;
- an early copy of φ1 (5 ps ahead), so the bottom-plate switch opens first;
- a late copy of φ2 (5 ps behind), so discharge starts after the sampling
  switches have settled.

The counter runs on the *falling* edge of the slice clock. That edge is when
the first-stage track-and-hold of the interleaved ADC holds its value (see
§3).

### 1.2 Folding the sign away (`phase_folder`)

The time measurement must stay positive. The phase folder builds a pulse
`p_in`:

- it rises with the first of the two V2T edges;
- it falls a fixed delay D_offset (100 ps) after the second edge.

The pulse width is therefore |Δt| + D_offset. An arbiter (`arbiter`, a flop
clocked by one edge sampling the other) records which edge came first; this
is the sign.

D_offset keeps the pulse measurable when the input is near zero. The price is
an offset that must be removed again.

### 1.3 The stochastic TDC (`stdc_delay_line`, `stdc_counter`)

The divided clock (period 800 ps) runs down a chain of 255 unit inverters.

- The chain is much longer than one period.
- Each inverter's delay carries random mismatch. The model uses 15 ps ±20 %,
  drawn once per stage from a seeded generator.

Folded into one period, the 255 tap edges are therefore spread
quasi-uniformly. Each tap clocks a flip-flop that samples `p_in`. A flop ends
up holding 1 exactly when its tap rose while the pulse was high. The adder
tree's count is then the pulse width in units of about 800 ps / 255 ≈ 3.1 ps.

No individual delay matters, only their statistics. This makes the converter
portable across cell libraries. The price is a non-uniform step size, which
shows up as DNL and INL. On the chip, those are corrected with a lookup table
computed off chip from captured codes (§3.4).

### 1.4 Unfolding and the offset loop (`unfolder`, `offset_adapt`)

The unfolder subtracts the offset estimate from the count and restores the
sign. It uses one's complement on the negative side, so +0 and −0 do not
collide:

```
c = count − offset;   adc_out = sign ? −c − 1 : c     (saturated to −128..127)
```

The offset that D_offset adds differs from slice to slice.
`offset_adapt` estimates it in the background from the output codes alone.
It counts over a window of 2^12 codes:

- **C**, the number of codes in −2..1 (the centre);
- **S**, the number of codes in −14..−11 and 10..13 (the reference, twice as
  many bins).

For an input that is smooth near zero, 2C ≈ S. The two wrong cases look like
this:

- **Offset estimate too large.** Both halves are pulled toward zero and
  overlap, so a peak forms: 2C > S + S/4. The loop decrements the offset.
- **Offset estimate too small.** A gap opens at zero: 2C + S/4 < S. The loop
  increments the offset.

The start value is D_offset in counts, (N_STDC·100 + 400)/800, which is 32
for 255 taps.

The direction of this correction follows from the unfolder arithmetic above.
The original block diagram prints the peak/gap labels the other way round.
With the subtraction as written, those labels would make the loop diverge,
so this design follows the arithmetic.

The bin positions, the window and the ±1 step are this design's. The source
describes only a histogram-based background loop.

## 2. The phase interpolator

The PI (`phase_interpolator`) takes the 5 GHz input clock and a 9-bit code,
and outputs the same clock delayed by a code-controlled fraction of its
period. It has no DLL and no calibrated delay cells. It measures its own
delay chain every cycle and spreads the code over however many stages one
period turns out to need.

```
clk_in -> [32 delay cells, 7 ps each] -> phases 1..32 -> [mixers M] -> [adj. buffers B]
                 |                                                         |
           [32 arbiters sample the phases at clk_in]          [odd 16:1 mux] [even 16:1 mux]
                 |                                                  \          /
           [encoder] -- mixer ctrl, mux select, wrap, 16-bit blend -> [phase blender] -> clk_out
```

- **Delay chain and arbiters** (`pi_delay_chain`, `arbiter`).
  1. Arbiter k samples phase k+1 on the rising edge of the clock.
  2. The resulting word reads 1 for taps delayed between half a period and
     one period.
  3. The first 1→0 transition of the word gives N, the number of whole
     delays in one period. It is clamped to 2..30. At 7 ps per stage and
     200 ps per period, N = 28.
- **Positions** (`pi_encoder`). One period is cut into L positions:
  - the taps 1..N;
  - then one mixer (`pi_phase_mixer`) that averages tap N+1 with the *next*
    input clock edge, splitting the short leftover interval evenly;
  - when N is even, a second such mixer as well, so that L = N+2 is even.

  For odd N, L = N+1. L must be even because the two muxes alternate
  odd/even. Without the second mixer, the alternation would break at the
  period boundary.
- **Code split** (`pi_encoder`). The code is divided into a segment and a
  fine step:
  - `seg = code[8:4] mod L` picks the segment;
  - `f = code[3:0]` picks the 1/16 step inside it.
- **Tap selection** (`pi_mux_network`). One mux picks the odd tap and one the
  even tap around the segment. Moving to the next segment changes only one
  mux input.
- **Blending** (`pi_phase_blender`). The blender is 16 shorted muxes. Its
  weight toward the even tap is f on even segments and 16−f on odd ones, so
  the output moves monotonically across segment boundaries.
- **Wrap.** On the last segment (seg = L−1) a `wrap` signal forces the odd
  mux to tap 1 of the *next* cycle. This closes the circle, so the delay
  covers a full 200 ps turn.
- **Trim** (`pi_adj_buffer`). Each tap has an adjustable buffer whose extra
  driver can be switched on (12 ps → 10 ps). This trims a path that would
  break monotonicity.

With the model's numbers, L = 30 and one turn is 480 codes. The mean step is
0.42 ps and the largest simulated step is 0.46 ps. The published silicon
reached 0.7 ps steps and was monotonic.

These choices are this design's; the source gives the structure but not
these details:

- reading the arbiter word;
- the second mixer for even N;
- the modulo-L code split and the wrap signal;
- all delay values.

## 3. Interleaving sixteen slices (`adc_ti_top`)

```
             pi_ctrl + ph_ofs[g]
clk (5 GHz) ------> PI g ----- pi_clk[g] --+--> SW_g (first-stage T&H, P and N)
                                           |          |
                                           |    4 slices, dividers in states 0..3
                                           +--> delay monitor g
slice codes --> double-flop aligner --> frame[16] (frame_clk = clk/4) --> capture SRAM
```

### 3.1 Clocking

Four PIs receive the same quarter-rate clock. PI g runs on code
`pi_ctrl + ph_ofs[g]`, where the sum wraps at 9 bits:

- `ph_ofs` sets the nominal 0/90/180/270° spacing, which is 50 ps apart;
- `ph_ofs` also removes each phase's residual skew;
- `pi_ctrl` rotates all four phases together.

Each PI clocks one group. Within a group, four slices divide that clock by 4
from staggered start states. Slice i = 4g + m therefore converts on edge
4e + m, and four groups × four slices × 1.25 GS/s = 20 GS/s.

### 3.2 Two-stage passive track-and-hold

Per group, one switch per polarity (`th_switch`) tracks while its PI clock is
high and holds while it is low. The slices' own input switches, in the V2T,
are the second stage. There is no buffer between the stages.

A slice samples on the falling edge of its clock (§1.1), so its sampling
phase ends inside the first stage's hold window. The model switches are
ideal: no charge sharing and no bandwidth limit.

### 3.3 Aligner and frames (`aligner`)

Each slice delivers its code in its own clock phase. The aligner brings all
16 codes into one frame:

1. A first flop per lane captures the code on the falling edge of that slice's
   conversion clock.
2. A second flop moves all lanes onto `frame_clk`, which is `clk` divided by 4
   (1.25 GHz).

Every lane has a fixed latency of one or two frames.

### 3.4 Capture SRAM, delay monitor, bias generator

- **Capture SRAM** (`capture_sram`). It stores 1024 consecutive frames, each
  128 bits, after a `cap_start` pulse, then raises `cap_full`. It is read
  through an independent registered port. The static-nonlinearity lookup
  table is computed off chip from these codes; it is not part of this RTL.
- **Delay monitor** (`phase_monitor`, one per PI). An asynchronous clock
  samples the PI's input and output clocks. The fraction of samples in which
  the two differ is 2d/T for a delay d below half a period T. A window is
  65536 samples.
- **Bias generator** (`biasgen`). Eight gate drivers are shorted onto one
  node, and each control bit turns one driver on. The model is the ideal
  divider vbias = 0.9 V · ones/8. The node biases every V2T current source;
  the nominal setting is 5 of 8 drivers (0.5625 V).

## 4. What is RTL and what is a model

**Synthesizable RTL:**

- `arbiter`, `stdc_counter`, `unfolder`, `offset_adapt`;
- `pi_encoder`, `pi_mux_network`, `pi_delay_chain`;
- `phase_monitor`, `aligner`, `capture_sram`;
- the package `adc_pkg`.

The delay chain and mux network are plain gates. Their delays are
`#`-annotated for simulation.

**Behavioural models** (each says so in its first comment):

- `v2t`, `v2t_clkgen` (the early/late skews), `phase_folder` (D_offset),
  `stdc_delay_line`;
- `pi_phase_mixer`, `pi_phase_blender`, `pi_adj_buffer`;
- `th_switch`, `biasgen`.

`adc_slice`, `phase_interpolator` and `adc_ti_top` are behavioural as a
whole, because they contain these models.

The models use `real` ports and variable delays written as
`fork #(d) ... join_none`. Synthesis tools cannot map real-valued signals.

Not modelled:

- the two custom analog cells (the sampling switch and the current-source
  cell), whose behaviour is folded into `v2t`;
- the off-chip static correction.

## 5. Departures and unknowns

The source gives the architecture, the block names, the sizes (255
inverters, 16 slices, 4 PIs, 9-bit PI code, 8-bit output, 1.25/20 GS/s,
5 GHz) and the selection sequence of the PI muxes.

This design chose:

- all analog numbers: V2T slope and threshold, the 7 ps chain delay, the
  15 ps ±20 % inverters, mixer and blender delays, buffer trims;
- the offset loop's bins, window and step; its direction goes against the
  printed figure labels (§1.4);
- the PI encoder details: period detection, the second mixer for even N,
  modulo-L segments, the wrap signal;
- the PI code adders wrapping at 9 bits;
- frame_clk = clk/4 and the aligner's capture edges;
- the SRAM depth and its capture protocol;
- the monitor window M = 65536 and one monitor per PI.

The measured figures of the silicon are not properties of this model, which
has no noise, jitter or bandwidth limit. These include ENOB 5.6 and the
Nyquist roll-off, DNL 0.95 LSB, INL 2.39 LSB, and the power and area. The
model's transfer function is deterministic for a given seed.

At 0.8 mV/ps, a 0.45 V differential input range (0.5·VDD) maps to about ±90
codes. A lower bias slows the ramp and raises the gain. At a bias of about
0.45 V and below, the slow V2T crossings run past the 800 ps conversion window
and the codes compress. The usable bias range is therefore the nominal
setting and above.

## 6. Simulating

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and stops. With Verilator 5:

```
verilator --binary --timing rtl/adc_pkg.sv -y rtl tb/tb_pi_encoder.sv --top-module tb_pi_encoder
./obj_dir/Vtb_pi_encoder
```

Add `-Wno-fatal` to keep lint warnings from stopping the build. Every file
uses `timescale 1ps/1fs`; delays are in picoseconds.

| Testbench | What it checks |
|---|---|
| `tb_<block>` | each block on its own, against independently computed values |
| `tb_adc_slice` | a full slice over a DC sweep of both signs |
| `tb_phase_interpolator` | a full turn of codes: monotonic, steps below 0.5 ps, 200 ps per turn, wrap at code 480 |
| `tb_adc_ti_top` | end-to-end run at reduced size, ≈20 s |
| `tb_adc_ti_top_full` | the top at every default size: 34 ns of simulated time, a few minutes of run time |

`tb_adc_ti_top` runs 2 PIs and 8 slices (10 GS/s), 63-tap STDCs, a 32-frame
SRAM, a 256-sample monitor and a 16-code offset window. It counts each
mechanism and fails if one never happened:

- PI phase spacing;
- conversion of both signs;
- a bias change;
- monitor readings;
- capture and readback;
- offset-loop movement;
- a PI period wrap with monotonic rotation.

`tb_adc_ti_top_full` covers:

1. reset;
2. quadrature phases 50 ps apart;
3. DC conversion of both signs on all 16 lanes;
4. the first words of a capture.

A full 1024-frame capture, the 65536-sample monitor and 4096-code offset
windows need microseconds of simulated time at that size, and the full model
simulates at well under 1 ns per second. The 4080 tap flip-flops, each
clocked by its own edge, dominate the run time.

The sizes are parameters of `adc_ti_top`:

- `N_SLICE`, `N_PI`, `N_STDC`;
- `SRAM_D`, `PM_M`, `ADAPT_LOG2_WIN`, `BIAS_W`.

**Known issue.** Both top-level testbenches pass when unreset state starts at
zero. When every unreset variable starts at a random value, some lanes return
wrong-signed or saturated codes for the whole run. The cause has not been
isolated. The suspect is a glitch on a PI output clock around reset release,
which would shift one slice's divide-by-4 counter relative to the others in
its group. The block-level testbenches pass either way.

`N_SLICE / N_PI` must be 4, because each slice's clock divider is fixed at
4. Shared constants and types are in `rtl/adc_pkg.sv`.
