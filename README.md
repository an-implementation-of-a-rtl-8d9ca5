# Goertzel filter bank channelizer

Frequency-multiplexed read-out of cryogenic sensors puts hundreds of carrier
tones on one cable. Each tone is modulated by one sensor. The room-temperature
electronics digitise the whole band and have to pull every tone out again, with
its amplitude and phase. A full FFT over the band spends most of its work on
bins that hold no carrier. This design computes only the DFT bins that are
wanted, one Goertzel filter per bin, and shares the filter hardware as
aggressively as the clock allows.

The RTL implements the FPGA channelizer described in *"An Implementation of a
Channelizer based on a Goertzel Filter Bank for the Read-Out of Cryogenic
Sensors"*. In its main configuration, 64 complex tones are extracted from a
250 MSPS complex stream:

- 8 coarse down-converters,
- 16 time-shared Goertzel cores,
- 2 shared output units.

All of it runs on a single 250 MHz clock.

```
 ADC 250 MSPS IQ                    31.25 MSPS IQ, 18 bit
 ──────────┬──► DDC 0 ──┐
           ├──► DDC 1 ──┤                            ┌─► GF core 0 ─┐
           │     ...    ├──► window (common) ──┬─────┤    ...       ├─► X[k] unit 0 ─► results
           └──► DDC 7 ──┘                      │     └─► GF core 7 ─┘
                                               │     ┌─► GF core 8 ─┐
                                               └─────┤    ...       ├─► X[k] unit 1 ─► results
                                                     └─► GF core 15─┘
         control registers ──► NCOs, CFIR taps, window table, kg, a/b/c/d RAMs, scaling
```

## The Goertzel filter as used here

For one bin k of an N-sample window, the Goertzel recursion runs once per
input sample:

    w0 = x[n] + kg·w1 − w2,   w2 ← w1,   w1 ← w0,   kg = 2cos(2πk/N)

After the last sample, the final pair (w1, w2) holds the whole bin. A fixed
linear combination turns it into the DFT value:

    X = a·w1 + c·w2 + j·(b·w1 + d·w2)
    α = 2πk/N,  β = 2πk(N−1)/N
    a = cos β,  b = −sin β,  c = sin α·sin β − cos α·cos β,  d = sin 2πk

This form (after Sysel and Rajmic) also works when k is not an integer. The
recursion is the *iterative section*: one multiply, two adds per sample. The
combination is the *non-iterative section*: four multiplies per bin per window.

The two sections have very different rates, and the design splits them
accordingly. The recursion lives in the GF cores. The combination is done by
one X[k] unit per eight cores.

Phase reference. With the coefficients above, X equals Σ x[n]·e^(−j2πkn/N).
The source's defining equation writes the exponent as k(n−N)/N. The two agree
for integer k and differ by a constant phase e^(j2πk) otherwise. The
coefficients are loaded by software, so either reference can be programmed.
The RTL itself does not fix it.

## Coarse channels: the DDCs (`ddc`, `nco_mixer`, `cic_decimator`, `cfir`)

The ADC has already decimated by 4 internally and delivers 16-bit I/Q at
250 MSPS, one sample per clock. Each of the 8 DDCs:

1. Mixes its band to 0 Hz. The NCO is a 32-bit phase accumulator with a
   1024-entry cos/sin table. The complex multiply is done with three
   multipliers: k1 = c(I+Q), k2 = I(s−c), k3 = Q(c+s).
2. Decimates by R = 8 with a 3-stage CIC, normalised to unity gain.
3. Filters with a 64-tap compensation FIR.

The decimation by 8 is what makes the rest of the design work. The FIR has 8
clocks per output sample, so 8 multipliers per component cover 64 taps. More
importantly, each Goertzel core also gets 8 clocks per sample.

- Output: 18-bit I/Q at 31.25 MSPS on the same LSB scale as the ADC input.
- All DDCs run in lock step from the same input stream.
- A DDC centred at f_c needs `ftw = f_c / 250 MHz · 2^32`.

The CFIR taps are written by software. The source does not give its
coefficient set. After reset the filter is a pass-through (h[0] = 1 − 2^−17,
all other taps 0).

## The window (`window_function`)

A single table w[0..1023] serves all DDCs. Entries are 18-bit signed, with 16
fractional bits, so flat-top windows with negative lobes fit. The unit:

- multiplies the current sample of every DDC by w[n mod N];
- flags the first and the last sample of each window;
- holds the index at 0 while the channelizer is disabled, so the first sample
  after enable starts a window.

N is a register (`WIN_SIZE`) and can be anything from 10 to 1024.

## One recursion, eight streams: the GF core (`gf_core`, `combiner`, `kg_bank`, `goertzel_mapping`)

This is the part that needs the most care.

### Time sharing

A core serves 4 DDCs. That gives 8 real streams: the I and Q of each DDC,
each with its own Goertzel state. A new sample of each DDC arrives every 8
clocks. The `combiner` latches the four complex samples and presents their 8
real components on 8 consecutive clocks. The position in that sequence is the
TDM slot:

    slot = {ddc[1:0], 0=I / 1=Q}

The I and Q of a DDC are filtered with the same kg. Software later combines the
two real-input results into one complex bin, X = X_I + j·X_Q. So a core
delivers 4 complex bins.

### The pipeline

`goertzel_mapping` computes the recursion in three register stages. They
follow the DSP-slice pipeline of the source (input registers, multiplier
register, post-adder register):

| clock | stage |
|---|---|
| 1 | register x, w1, w2, kg |
| 2 | register kg·w1; x and w2 are also delayed one stage |
| 3 | register w0 = x + kg·w1 − w2 (saturated) and w1 (the new w2) |

A new slot enters every clock. The slot's updated (w1, w2) must be back at the
input exactly 8 clocks later, when that slot's next sample arrives. The core
closes the loop through two delay lines of 8 − 3 = 5 registers, one for w1 and
one for w2. So the loop contains 8 registers holding 8 independent filter
states. This is why the design needs the decimation: at one sample per clock
the 3-clock loop could not close.

At the first sample of a window, the delay-line outputs are replaced by zeros,
which resets the state. After the last sample, the mapping's 8 outputs are the
final states. They leave the core as `res_valid`/`res_slot`/`res_w1`/`res_w2`
on 8 consecutive clocks, starting 4 clocks after the last sample enters the
combiner.

### Feedback coefficients and when they change

Each core holds 4 values of kg, one per DDC, in three layers:

- **kg SRL.** Software shifts words in, one register write per word. The word
  written last lands in the slot of DDC 0, so write the kg for DDC 3 first and
  the kg for DDC 0 last.
- **Sync buffer.** This is what the filter actually uses. A write to
  `KG_UPDATE` raises `kg_pending` in every core.
- **MUX.** Selects the sync-buffer entry by slot / 2.

The sync buffer copies the SRL at the next window boundary: the clock on which
slot 7 of the last sample of a window is processed. If the core is idle, it
copies at once. Every window therefore runs entirely with one set of
coefficients. Software can prepare a retune while the filter runs.

The a/b/c/d coefficients of a retuned bin are read by the X[k] unit when the
window that used the *old* kg is finished. Write them after that window's
results have come out and before the next window ends. At N = 256 that is a
window of about 1900 clocks.

### State scaling

The states of a resonant bin grow roughly linearly over the window. The
source scales them rather than the input: a software shift `asf` applied to w1
and w2, typically ceil(log2(4N/π)) = 9 for N = 256.

Here the states are stored as w·2^(14 − asf) in 32 bits. That is the true
state, shifted right by asf but kept with 14 extra fractional bits. Inside the
mapping, the product kg·w1 is formed with its full fraction before the shift,
so small states lose nothing.

If a new w0 does not fit in 32 bits, it saturates and the core raises `ovf`.
The top keeps this as a sticky `gam_ovf` bit per core. Full-scale input on
bins very close to 0 Hz needs a larger `asf` than 9.

## From states to bins: the X[k] unit (`xk_calc`, `coef_ram`, `polar_cordic`)

Each unit serves 8 cores, that is 64 real streams. The cores of a unit finish
their windows together. Their 64 final state pairs are captured into one
buffer and then processed one per clock:

    re = a·w1 + c·w2,   im = b·w1 + d·w2
    out = sat32( (re, im) · ACF >>> out_shift )

- **Coefficients.** a, b, c and d come from four 32-word RAMs, addressed by
  bin = {core (3 bits), ddc (2 bits)}. I and Q of a DDC share a bin.
- **ACF.** The window's amplitude correction factor, 1/Σw[n]. It restores the
  amplitude lost to the window.
- **Output scaling.** With ACF given f fractional bits and the coefficients 16:

      out = X · ACF_real · 2^(14 − asf + 16 + f − out_shift)

  For N = 256, asf = 9, a rectangular window and ACF = 2^17 (f = 25, i.e.
  1/256), `out_shift = 46` yields the tone amplitude in ADC LSBs.
- **Result format.** Results leave as `xk_result_t` {core, slot, re, im}, one
  per clock, in a burst of 64 that ends 69 clocks after the unit started.
- **Polar mode.** Setting `POLAR = 1` at synthesis time inserts a 30-step
  vectoring CORDIC. re then carries |X| and im the phase, with 2^32 = one turn.
  Latency grows by 32 clocks.

The capture buffer is single. If the next batch arrives while the previous one
is still being processed, it is dropped and `xk_overrun` is set (sticky). This
happens only for N ≤ 9.

## Programming model

Writes only, one 32-bit word per clock. The address map is defined in
`gfb_pkg`:

| address | register |
|---|---|
| 0x0000 | CTRL: bit 0 enable |
| 0x0001 | WIN_SIZE: N, reset 256 |
| 0x0002 | ASF: 0..14, reset 9 |
| 0x0003 | ACF: 18 bit unsigned, reset 2^17 |
| 0x0004 | OUT_SHIFT: reset 38 |
| 0x0005 | KG_UPDATE: any write |
| 0x0100 + d | NCO tuning word of DDC d |
| 0x0200 + t | CFIR tap t (Q1.17) |
| 0x0400 + c | shift one kg (Q2.16) into core c |
| 0x1000 + n | window coefficient w[n] (Q2.16) |
| 0x4000 + {unit, sel, bin} | a/b/c/d RAMs: sel 0..3 = a, b, c, d; bin = {core in unit, ddc}; data Q2.16 |

### How tones map to cores

- Cores 0–7 read DDCs 0–3 and feed X[k] unit 0.
- Cores 8–15 read DDCs 4–7 and feed unit 1.
- Every DDC therefore feeds 8 cores, i.e. up to 8 bins per coarse channel.
- Results of unit u, core j, slot s belong to DDC 4u + s/2.

### Bring-up sequence

1. Write the NCO words, window table, WIN_SIZE, ASF, ACF and OUT_SHIFT.
2. For each core, shift in 4 kg words and write its 16 coefficients.
3. Write KG_UPDATE.
4. Enable.

The input stream must be continuous while enabled. The cores assert that no
sample is missing inside a window.

## Rates and latencies

| item | value |
|---|---|
| Clock | 250 MHz, one ADC sample per clock |
| DDC output | 31.25 MSPS, one sample per 8 clocks |
| Mixer latency | 4 clocks |
| CFIR latency | 10 clocks after its input |
| Window latency | 1 clock |
| Bin rate | 31.25 MSPS / N: 122.07 kHz at N = 256 |
| Result bursts | 64 results per unit every 8N clocks (2048 at N = 256) |

## Departures and choices

What the source fixes and this RTL follows:

- R = 8;
- 4 DDCs per core;
- 8 real bins per core;
- a common, cyclic, software-defined window;
- the kg SRL / sync buffer / MUX structure;
- the w1/w2 delay chains;
- four coefficient BRAMs;
- one X[k] module per eight cores;
- ACF applied after Re/Im;
- cartesian or polar output chosen at synthesis;
- 16/18/32-bit widths for ADC, DDC and Goertzel states;
- 64 tones from 8 DDCs and 16 cores.

What this design chose where the source is silent:

- CIC order 3;
- 64 CFIR taps, from 8 multipliers × 8 clocks;
- the NCO table size;
- all fixed-point formats of coefficients;
- the 14 extra fractional bits of the states;
- saturation and the overflow and overrun flags;
- the kg update rule at window boundaries;
- the grouping of DDCs onto cores;
- the register map;
- delivering I and Q results separately instead of combining them in hardware;
- CORDIC for the polar mode;
- a single capture buffer in the X[k] unit.

Multiplier count. The source counts 184 DSP slices for this configuration.
The RTL has 180 multipliers:

- 8 DDCs × (3 + 16);
- 16 × 1 Goertzel multiplier;
- 2 X[k] units × 6.

The source's second Goertzel slice and its 12-slice X[k] module correspond to
adders and wider products here.

The CFIR coefficients and the windows of the source (modified flat-top,
Dolph-Chebyshev) are not given numerically. Both are tables loaded at run
time.

## Simulation

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. The package must be compiled first. For
example:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        --top-module tb_gfb_top rtl/gfb_pkg.sv tb/tb_gfb_top.sv
    obj_dir/Vtb_gfb_top

`tb_gfb_top` runs the complete design at its default size. The stimulus is
eight tones, one per DDC, each on an exact bin of a 256-sample window. The run
takes well under a minute. It checks:

- every tone bin within 2 % of the expected amplitude, including the CIC droop;
- every empty bin below 1 %;
- the result period of 2048 clocks;
- a live kg retune that stays pending until the window boundary;
- state saturation with asf = 0;
- X[k] overrun with 8-sample windows.

It counts a failure for any of these that never happened.

`tb_gfb_response` also runs at the default size and measures the filter
response, as a frequency sweep on hardware would.

- **Windows.** Three are computed in the testbench: rectangular, 5-term
  flat-top and Dolph-Chebyshev with 100 dB side lobes. The ACF is set to
  1/Σw for each.
- **Sweep.** Tones are placed at 0, 0.3, 0.5 and 0.8 bins off the bin grid,
  and the 8 cores of each DDC group sit on neighbouring bins.
- **Check.** Every result must match the ideal windowed response, including
  the CIC droop, within 1 % plus 0.3 % of the tone amplitude. The largest
  error seen is about 4 LSB on a 3000 LSB tone.
- **AM.** It then demodulates a 20 kHz amplitude modulation and checks each
  window's result against the window average of the envelope.
- **Polar.** A second copy of the top, built with `POLAR = 1`, runs on the
  same input. Each of its 512 checked results must match the magnitude and
  phase of the matching Cartesian result, within 4 LSB and 0.2 degree.

`tb_gfb_modulation` recreates the flux-ramp read-out case, also at the
default size.

- **Signal.** Each carrier's amplitude carries a 30 kHz tone. A 60 degree
  phase modulation at 200 Hz rides on that tone, shaped as a sine,
  triangle or square wave depending on the DDC.
- **Length.** It runs a full 200 Hz period, which is 620 windows of 256.
- **Window check.** Each window's magnitude must match the model.
- **Demodulation check.** The result streams are then demodulated as host
  software would do it: mix with the 30 kHz reference, then take a moving
  average. The recovered phase must track the model's within 1.5 degree,
  and its swing must come out near 120 degree.

The block testbenches compare against independent models computed in the
testbench: real-valued trigonometry, a direct Goertzel loop, a bit-level CIC
sum and so on. They also check the pipeline latencies.
