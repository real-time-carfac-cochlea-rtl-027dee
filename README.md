# A time-multiplexed CARFAC cochlea model for real-time hydrophone pre-processing

CARFAC (Cascade of Asymmetric Resonators with Fast-Acting Compression) is a
model of the inner ear. A sound sample enters a chain of resonators, tuned
from high to low frequencies. The output of each resonator is the
displacement of one place on the basilar membrane (BM). Two feedback paths
make the filter bank level dependent:

* a fast, per-sample path through the *digital outer hair cells* (DOHC),
  which reduce the undamping of a section when its velocity is large;
* a slow path through the *digital inner hair cells* (DIHC) and a four-stage
  *automatic gain control* (AGC) loop, which smooths the DIHC activity over
  time and across neighbouring channels and scales the undamping down.

This RTL computes a 64-channel CARFAC on a 24-bit input stream at 256 kHz,
which is a typical hydrophone rate. It uses **one** copy of each unit and
sweeps it over all channels. One 100 MHz clock leaves 390 cycles per input
sample. The design needs 72 cycles per sample, plus 65 cycles for each AGC
stage that is due. The worst case is every 64th sample, with all four stages
due: 332 cycles.

The arithmetic follows the division-free form of CARFAC that FPGA work on this
model uses. The three divisions of the textbook model are replaced by
polynomials. These need only multipliers, squarings and shifts.

## The per-channel schedule

The sequencer (`carfac_ctrl`) takes one sample from the AXI4-Stream input.
It then issues channel 0, 1, ..., N-1 on consecutive clock cycles. Each
channel goes through six cycles:

| cycle | unit | work for channel n |
|---|---|---|
| 1 | `car_section` | resonator update, BM output y_n |
| 2 | `dihc` | AC-coupling high-pass, transduction nonlinearity |
| 3 | `dihc` | transmitter reservoir, two output low-passes |
| 4 | `agc_loop` | add the DIHC output into the four stage accumulators; push {y, DIHC} to the output FIFO |
| 5 | `agc_loop` | read b (the fastest AGC stage) of the channel and form 1 - b |
| 6 | `dohc` | velocity, OHC nonlinearity, undamping u, new r and g |

Channel n+1 starts one cycle after channel n. The cascade needs y_n as the
input of section n+1, and the CAR unit finishes in one cycle, so the
registered output of one channel feeds the next channel directly. Delay
registers in `carfac_top` carry y and W1 alongside the pipeline to the stage
that uses them. The new r and g written in cycle 6 are used by the same
channel at the next sample.

Only one sample is in flight. After the last channel is issued the
sequencer waits six cycles, until the last r/g update is stored. It then
ticks the AGC loop and waits while the loop updates its stages. Then it
accepts the next sample. Per sample this is N_CH + 8 cycles, plus
(N_CH + 1) for each AGC stage that runs.

## The resonator section (CAR)

Each section is a two-pole, two-zero filter. Its pole radius r changes every
sample. Let W0 and W1 be the section's two state words and x its input
(the sample for channel 0, otherwise the previous channel's y). Then:

```
W0' = r (a0 W0 - c0 W1) + x
W1' = r (c0 W0 + a0 W1)
y   = g (x + h W1')
```

a0 = cos θ and c0 = sin θ set the pole frequency θ, and h places the zeros.
These coefficients are fixed per channel. r and g are per-channel state
inside `car_section`. Host writes of r1 and C set their initial values, and
every sample the DOHC overwrites them.

## Division-free nonlinearities

**DOHC.** The velocity is v = W1' - W1, the change of W1 over one sample.
The textbook compression is 1/(1 + (0.1 v + 0.04)^2). It is replaced by

```
NLF = max(0, 1 - (0.1 v + 0.04)^2 / 8)^8        (ohc_nlf)
u   = (1 - b) * NLF                              undamping in [0,1]
r   = r1 + d_rz * u
g   = A u^2 + B u + C                            (gain_poly)
```

The textbook DC gain g = (1 - 2a0 r + r^2)/(1 - (2a0 - h c0) r + r^2) would
need a divider. Here it is a quadratic in u, with coefficients A, B, C
computed off-line for each channel. The coefficient-design function in the
testbench package fits them through the exact gain at u = 0, 0.5 and 1. With
that fit the polynomial stays within 0.25 % of the exact gain over the
testbench filter bank. `gain_poly` evaluates the quadratic as (A u + B) u + C,
so it needs only two multipliers.

**DIHC.** The textbook conductance is p^3/(p^3 + p^2 + 0.1). It is replaced by

```
p_int = max(0, 1 - (x + 0.13)/4),  p = min(1, p_int^8),  vmem = 0.75 (1 - p)^2
```

where x is the high-passed BM displacement. In both nonlinearities the
eighth power is three squarings, and the divisions by 4 and 8 are shifts.

The rest of the DIHC (`dihc`) is a transmitter reservoir. With q the
depletion state, the released amount is vmem (1 - q), and q follows a
low-pass of 20 times the released amount. Two cascaded one-pole low-passes
then smooth the released amount into the DIHC output.

## The AGC loop on one shared filter

The AGC has four smoothing stages. Their time constants are 2, 8, 32 and
128 ms, and they update every 8, 16, 32 and 64 samples. In the RTL stage 0 is
the fastest and stage 3 the slowest. Each stage has its own per-channel
accumulator of DIHC outputs, cleared each time the stage runs. One
combinational filter, `agc_sf`, serves all stages and channels:

```
in  = acc / decimation + 2 * state[slower stage]     (slowest stage: no second term)
t   = c_t in + (1 - c_t) state[this stage]           temporal low-pass
out = s1 t[n-1] + (1 - s1 - s2) t[n] + s2 t[n+1]     spatial 3-tap smoother
```

c_t = decimation / (256 kHz · τ). For these time constants c_t is 1/64,
1/128, 1/256 and 1/512.

The spatial step needs t of the right neighbour. `agc_loop` therefore runs
the spatial step one channel behind the temporal one. In cycle j it forms
t[j] and writes the smoothed state of channel j-1. A stage run takes
N_CH + 1 cycles. At the two ends of the channel array the missing neighbour
is replaced by the channel itself. When several stages are due after the
same sample, they run from the slowest to the fastest, so each stage sees the
new state of the next-slower one. The AGC output b is the state of the
fastest stage. The DOHC reads it as 1 - b, clamped to [0, 1].

## Number formats

| type | width | format | use |
|---|---|---|---|
| input sample | 24 | Q1.23 | AXI4-Stream input |
| `sig_t` | 36 | Q12.24 | all signals and filter states |
| `coef_t` | 18 | Q2.16 | coefficients, r, g |

Every signal × coefficient product has one 18-bit operand, which fits a
DSP-slice multiplier. Products are truncated by an arithmetic shift.
Additions and products saturate to the `sig_t` range. Multiplications by 2,
4, 16 and 20 are shifts and adds. The helpers are in `carfac_pkg`.

## Interfaces of `carfac_top`

* `s_axis_*`: input samples, 24-bit two's complement. `s_axis_tready` is low
  while a sample is being processed. It also stays low while the output FIFO
  has no room for all N_CH result words of the next sample.
* `m_axis_*`: one 80-bit beat per channel and sample, channel 0 first, with
  `tlast` on channel N_CH-1. The beat holds `tdata[35:0]` = BM output y,
  `tdata[71:36]` = DIHC output and `tdata[79:72]` = channel number.
* `cfg_we/cfg_ch/cfg_sel/cfg_data`: writes one 18-bit coefficient field
  (`coef_sel_e`: a0, c0, h, r1, d_rz, A, B, C) of one channel. Load all
  channels before streaming. The coefficient memory is not reset.
* `busy` and `stat_*`: status pulses for credit stalls, finished AGC stage
  runs, and clipping of the DOHC and DIHC nonlinearities.

## How far this follows the published design, and where it departs

Taken from the published design:

* the 64 channels, 256 kHz input and 100 MHz clock;
* the six-cycle CAR / DIHC / AGC / DOHC channel schedule, with one channel
  started per cycle;
* the resonator structure;
* the three division replacements and their constants (0.13, /4, ^8, 0.75;
  0.1, 0.04, /8, ^8; g = A u^2 + B u + C);
* the DOHC structure r = r1 + d_rz (1 - b) NLF(v);
* the DIHC chain (HPF, NLF, reservoir with feedback gain 20, two LPFs);
* the four AGC stages with their time constants and decimation;
* one shared temporal/spatial filter with coefficients c_t, s1, s2;
* AXI4-Stream input and output.

This design's own choices:

* **Word widths and formats** (above). The source gives only "24-bit input,
  mostly 18-bit multiplier operands". It also grows each addition by one
  bit. Here all signals keep one 36-bit format and saturate instead.
* **Pipeline depth.** The original spreads about 100 register stages over the
  units to close timing at 100 MHz. Here each unit does its work in the cycle
  count of the schedule, with long combinational paths. The cycle-level
  behaviour is that of the schedule, but 100 MHz on an FPGA is not claimed.
* **DIHC filter constants**: 20 Hz AC coupling, 0.5 ms reservoir low-pass and
  80 µs output low-passes. The source does not give them.
* **AGC details.** s1 = s2 = 0.125. The accumulator is divided by the stage's
  decimation factor. The edge channels reflect. Due stages run slowest first.
  The figure caption of the source says each stage takes its input "from the
  lower filter stage with the smaller time constant", but its drawing feeds
  the slow stages into the fast ones. This RTL follows the drawing, which
  also matches CARFAC.
* **A, B, C** are read as one set of coefficients per channel. The source
  calls them "lookup tables indexed by u".
* **Coefficient memory.** Two asynchronous read ports (distributed RAM), one
  for the CAR cycle and one for the DOHC cycle, instead of block RAM.
* **Flow control.** One sample in flight, and a credit check against the
  output FIFO. The source says only that the accelerator is AXI4-Stream
  compatible and runs only when data is valid.
* **Output word.** Both y and the DIHC output of every channel.
* Not included: the processor, DMA engine and software around the
  accelerator. The top exposes plain AXI4-Stream and configuration ports
  where they would connect.

## Files

`rtl/`: `carfac_pkg` (types, formats, constants), `carfac_top`,
`carfac_ctrl`, `coef_ram`, `car_section`, `dihc`, `ihc_nlf`, `agc_loop`,
`agc_sf`, `dohc`, `ohc_nlf`, `gain_poly`, `axis_out_fifo`.

`tb/`: one self-checking testbench `tb_<module>` per module, plus
`carfac_ref_pkg`. That package designs the coefficients of a CARFAC bank in
real arithmetic: pole frequencies 0.5 ERB apart from 0.85 · fs/2 downwards,
damping between 0.10 and 0.35, and h = c0. It also holds a sequential
reference model of the fixed-point accelerator.

`tb_carfac_top` runs the full 64-channel design for 256 samples. Its input is
a 20 kHz tone that starts quiet and then runs near full scale, with clicks.
The test inserts random input gaps and output back-pressure, and one long
output stall. It compares every output word bit for bit with the reference
model. It checks that every sample interval equals the schedule above and
stays within the 390-cycle real-time budget. It also checks that each
mechanism happens: input stall, output credit stall, each AGC stage, and
clipping in both nonlinearities. The unit testbenches compare against
real-valued formulas within a small tolerance.

`tb_carfac_realtime` streams two 4 ms runs of a 10 kHz tone through the
default design: one at -40 dBFS and one 34 dB louder. It checks every word
against the model and checks the sustained rate: 87.2 cycles per sample on
average, against 390 available. It also checks that the bank compresses. In
the most excited channel the output grows by about 13 dB (a factor of 4.3)
for the 34 dB input step.

Neither the FPGA resource use nor the power of the original system is
reproduced here. Those numbers belong to a vendor toolflow and board.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/carfac_pkg.sv tb/carfac_ref_pkg.sv tb/tb_carfac_top.sv --top-module tb_carfac_top
./obj_dir/Vtb_carfac_top
```

Replace `tb_carfac_top` by any other `tb_<module>`. Each testbench ends by
printing `TB_RESULT checks=<n> failures=<m>`. The full-size top-level test
takes about a second.

To change the channel count, set `N_CH` on `carfac_top` (1 to 256). Above
75 channels the worst-case sample (all four AGC stages due) no longer
fits into 390 cycles at 256 kHz / 100 MHz. To load a different filter bank,
write other coefficients through the `cfg_*` port.
