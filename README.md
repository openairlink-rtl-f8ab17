# A tapped-delay-line channel emulator for a software-defined radio FPGA

A conducted-RF channel emulator goes between a transmitter and a receiver
in place of the air. It delays the signal, attenuates it and can add
reflected copies, so that a wireless link can be repeated exactly, and long
distances or moving nodes can be emulated on a lab bench. This design does
that on the FPGA of an off-the-shelf software-defined radio. The radio's
receive chain digitises the signal. The FPGA applies the channel to the
complex baseband samples. The radio's transmit chain turns the result back
into RF.

The channel model is a tapped delay line (TDL), which is a causal FIR
filter. For complex samples x[n]:

    y[n] = ( sum_{i=0}^{N-1} b_i * x[n-i] ) >> 15

- A path of delay `d` sample periods and linear gain `g` is one non-zero
  coefficient, `b_d = round(g * (2^15 - 1))`.
- A multipath channel uses a few non-zero taps.
- At 200 MHz with one sample per clock, a tap is 5 ns, which is 1.5 m of
  free-space distance.
- With N = 42 taps the longest delay is 41 x 5 ns = 205 ns, about 60 m.

The RTL here is the FPGA part: the datapath, its buffers and the settings
that the host writes at run time. It follows the published description of
the OpenAirLink emulator (a USRP X310 with 200 MHz clock, 16-bit integers
and 42 taps). Where that description is silent, this design makes its own
choices, and each one is named below.

## Blocks

| module | what it is |
|---|---|
| `oal_pkg` | shared types (`iq_t` complex sample, `coef_t`), sizes, register map |
| `oal_bit_shifter` | coarse attenuation: arithmetic right shift of I and Q by `j` bits (0 to 8) |
| `oal_fir_tdl` | the 42-tap TDL/FIR filter, with a pass-through mode |
| `oal_sample_fifo` | synchronous FIFO (32 entries) between the converters and the datapath |
| `oal_channel_regs` | coefficient, shift and control registers with shadow/commit update |
| `oal_channel` | one link: input FIFO, shifter, FIR, output FIFO, registers, status counters |
| `oal_top` | two independent links (uplink and downlink) behind one settings port |

Not in the RTL: the RF front ends, the ADC and the DAC (analog or
mixed-signal parts of the radio), the host program, and the radio vendor's
streaming framework and Ethernet transport. Their signals are ports of
`oal_top`: `adc_*` for received samples, `dac_*` for samples to transmit,
and `cfg_*` for the host's register writes.

## Attenuation: why there are two stages

A single 16-bit coefficient with 15 fractional bits covers about
20·log10(32767) ≈ 90 dB. Its step, however, is 20·log10((b+1)/b), which
grows as `b` shrinks. Near b = 1 the step is 6 dB, too coarse to emulate
distance. The design therefore splits an attenuation of `G` dB in two:

1. **Coarse:** `oal_bit_shifter` divides every sample by `2^j`, which is
   about 6.02·j dB for all paths at once. j is at most 8.
2. **Fine:** the FIR coefficient makes up the remainder, `G - 6.02 j`.

A host that picks `j = min(8, floor(G / 6.0206))` keeps `b >= 16384` up to
48 dB. There the step is at most 20·log10(16385/16384) ≈ 0.00053 dB. Above
48 dB, `b` falls and the step grows: 0.01 dB at 80 dB. The greatest total
attenuation is 48.2 + 90.3 ≈ 138.5 dB (b = 1, j = 8). The published
figure is about 144 dB, which comes from a different formula.

**Which stage comes first.** The published text puts the shift before the
FIR filter. The published latency diagram draws the FIR filter first. The
parameter `SHIFT_FIRST` chooses the order:

- `SHIFT_FIRST = 1` (default) follows the text.
- `SHIFT_FIRST = 0` follows the diagram. It keeps more low-order bits at
  high attenuation, because the FIR sum is formed at full precision before
  the shift.

Both orders are tested.

**Rounding.** All rounding is truncation toward minus infinity: the
arithmetic shift in the shifter, and dropping the 15 fractional bits of
the FIR sum. The error is therefore between 0 and 1 LSB, always
downwards. The published description calls the error truncation but gives
its bound as 0.5 LSB, which only rounding to nearest would give. This
design truncates. A FIR sum that does not fit in 16 bits saturates,
which is this design's choice. Such sums occur when several in-phase paths
add up beyond full scale.

## The FIR datapath (`oal_fir_tdl`)

Four pipeline stages, one sample per clock:

1. **Delay line.** `dl[0] <= x`, `dl[k] <= dl[k-1]`. It advances once per
   accepted sample, so a tap is one sample period. At the full rate of one
   sample per clock, that is one clock, as in the original.
2. **Products.** There are 2 x 42 products of 16 x 16 bits, one for I and
   one for Q at each tap. The real coefficient `b_i` scales I and Q alike.
3. **Sum.** The 84 products are added at 38 bits.
4. **Scale and saturate.** The sum is shifted right by 15 and saturated.
   In pass-through, the raw sample is output instead.

The pass-through path carries the raw sample through the same registers.
Switching the filter on or off therefore never changes the stream's
timing. All products of one output are formed in the same clock from the
coefficients in effect then. A coefficient change therefore lands between
two output samples, never inside one.

## Updating the channel at run time (`oal_channel_regs`)

The host replays a prepared list of channel states. The reported rate is
1000 updates per second, which at 200 MHz is one update every 200,000
clocks. Moving a path by one tap clears one coefficient and sets the next,
and the datapath must not see the state in between. So every register
write goes to a shadow copy. A write to the commit address copies the
whole shadow set into the active set in one clock.

Register map: word addresses, 32-bit write data.

| address | register |
|---|---|
| `0x00`–`0x29` | coefficient `b_i` of tap `i`, signed, low 16 bits |
| `0x80` | coarse shift `j`, low 4 bits, clamped to 8 |
| `0x81` | control: bit 0 = FIR pass-through |
| `0x82` | write: commit. Read: number of commits |

- `cfg_raddr` / `cfg_rdata` read the active values.
- In `oal_top`, `cfg_chan` and `cfg_rchan` select the link.
- After reset, each link is in pass-through: bypass on, shift 0. A link
  that was never configured forwards its input unchanged.
- A full update is at most 45 writes: 42 coefficients, the shift, the
  control word and the commit. That is far below the 200,000 clocks
  between updates.
- One tap per update at 1000 updates per second is 1.5 m per ms, i.e.
  1500 m/s.

The register map, the shadow/commit scheme, the reset state, the
read-back and the counters are this design's own choices. The published
description only says that the coefficients are rewritten at run time.

## Streams, FIFOs, overflow and underflow (`oal_channel`)

Every stream uses valid/ready. The `iq_t` struct carries signed 16-bit I
and Q. A stalled stage holds its output, and assertions in the shifter and
the FIR filter check that rule.

The receive side has no ready signal. A converter delivers a sample every
period whether or not the sample can be taken. If the sample finds the
input FIFO full, it is dropped and counted in `overflow_count`. The input
FIFO is full exactly when `in_level` equals the FIFO depth.

`underflow_count` counts the clocks after the first output sample in which
the transmit side was ready but no sample was waiting.

The two FIFOs stand for the buffers that the radio's streaming framework
places between processing blocks. Their depth (32) is this design's
choice.

**Latency.** With an always-ready output, a sample takes 7 clocks (35 ns)
from `adc_valid` to `dac_valid`:

| stage | clocks |
|---|---|
| input FIFO | 1 |
| shifter | 1 |
| FIR filter | 4 |
| output FIFO | 1 |

A programmed delay of `d` taps adds `d` clocks to this. The published
latencies are much larger: about 590 ns for the FIR filter, 230 ns for the
shifter and 1.72 µs in total. Those numbers include the vendor framework,
the converters and the RF front ends, so they are not a property of this
RTL.

## Parameters

| parameter | default | where it comes from |
|---|---|---|
| `N_TAPS` | 42 | published: 42 taps, 205 ns |
| `MAX_SHIFT` | 8 | published: s = 8 |
| sample and coefficient width | 16 | published: 16-bit signed integers, r = 15 |
| `N_CHAN` | 2 | published: uplink and downlink at once |
| `FIFO_DEPTH` | 32 | this design |
| `SHIFT_FIRST` | 1 | published text; the diagram gives 0 |

## Departures and open points

- **Sum range in the equation.** The TDL equation sums `i = 0..N` (N+1
  taps). The stated maximum delay `(N-1)/f` and 205 ns imply taps
  `0..N-1`, and this design uses those.
- **Doppler and fading.** Neither is emulated; the original does not
  emulate them either.
- **Calibration and the local-oscillator tone.** Gain calibration and the
  leakage tone are handled in the radio's analog chain and host software,
  not here.
- **Resolution above 48 dB.** The quoted worst-case resolution of
  0.000528 dB holds with these parameters only up to about 48 dB (see
  above).

## Testbenches

Every testbench checks itself, stops on a watchdog, and ends with a
`TB_RESULT checks=N failures=M` line. The reference models are written
independently of the RTL, using integer floor division and 64-bit sums.

| testbench | what it checks |
|---|---|
| `tb_oal_bit_shifter` | random samples and shifts 0–15 (clamp), random stalls, 1-clock latency |
| `tb_oal_fir_tdl` | impulse on every tap, random sparse multipath under stalls, saturation, pass-through, 4-clock latency |
| `tb_oal_sample_fifo` | order, level, full and empty against a queue model; 1-clock latency |
| `tb_oal_channel_regs` | reset state, shadow writes invisible until commit, atomic commit, unmapped addresses, read-back |
| `tb_oal_channel` | both stage orders against a model; every tap; multipath with shift; overflow accounting; underflow; 7-clock latency |
| `tb_oal_top` | two links at the default size (see below) |
| `tb_oal_workloads` | the evaluation scenarios (see below) |

`tb_oal_top` runs the whole design at its default size. It covers:

- pass-through after reset;
- different channels on the two links, showing that they are isolated;
- switching pass-through on and off;
- mobility: 20 commits per link while samples stream, where each output
  must come wholly from the old or wholly from the new channel, with
  exactly one switch per commit;
- saturation, overflow and underflow.

Each of these events is counted, and one that never happens is a
failure.

`tb_oal_workloads` runs three scenarios:

- **Delay.** A single path on every tap 0–41, measured as the lag of the
  largest cross-correlation between input and output.
- **Attenuation.** 0–80 dB in 8 dB steps, and 63–73 dB in 1 dB steps.
  Measured power ratios are within 0.25 dB of the target up to 64 dB, and
  within 0.45 dB at 80 dB, where truncation of a few-LSB output shows.
- **Mobility.** Five updates, 200,000 clocks apart, with the path moving
  one tap each.

To run one with plain Verilator:

    verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
        rtl/oal_pkg.sv tb/tb_oal_top.sv --top-module tb_oal_top
    ./obj_dir/Vtb_oal_top

Each of these runs takes seconds. Testbenches that read nothing but the
package and their block can be built the same way, with the testbench's
name in place of `tb_oal_top`.
