# All-digital Doppler cancellation for a local fiber link

A laser that is ultra-stable at one end of a fiber is no longer ultra-stable at
the other end: temperature and vibration change the optical length of the
fiber and write phase noise onto the light. The classic cure is Doppler
cancellation. Part of the light is reflected back from the far end. It is
compared with the light that never left, and an acousto-optic modulator (AOM)
at the input shifts the outgoing light's frequency so that the round-trip phase
noise is cancelled. The phase detector, the loop filter and the oscillator that
drives the AOM form a phase-locked loop.

This RTL is the digital part of such a loop, built for a small FPGA board with
a 16-bit ADC, a 14-bit DAC and a 122.88 MHz sample clock. Its main idea is that
no RF mixing, frequency doubling or filtering before the ADC is needed:

* the 220 MHz beatnote of the interferometer goes straight into the ADC and is
  **undersampled** (it lands at 25.76 MHz);
* the oscillator that drives the AOM runs at only 12.88 MHz, and its
  **alias** at 122.88 − 12.88 = 110 MHz, picked out by a narrow band-pass
  filter after the DAC, drives the AOM.

The same RTL also holds a **built-in disturbance-rejection test**. A known
sinusoidal frequency modulation is injected into the loop, and the controller's
response is recorded in an on-chip RAM. This measures how well the loop rejects
noise without access to the far end of the fiber.

## Frequency plan

All frequencies are integer relations of the 122.88 MHz clock `fclk`:

| quantity | value | where it comes from |
|---|---|---|
| `f_out` | 12.88 MHz | output oscillator NCO_out, inside the DAC's first Nyquist zone |
| `f_AOM` | 110 MHz | `fclk − f_out`, first DAC image, selected by a 110 MHz SAW filter |
| `f_beat` | 220 MHz | light passes the AOM twice: `2·f_AOM` |
| `f'_in` | 25.76 MHz | `2·fclk − f_beat`, where the ADC sees the beatnote |
| `f_demod` | 25.76 MHz | demodulation oscillator NCO_demod, equal to `f'_in` |

Two consequences matter when you change or test the loop:

1. `f'_in = 2·f_out` exactly, because both are images of the same 12.88 MHz
   tone. The demodulation oscillator therefore runs at twice the output
   oscillator, and their increments differ by one LSB only because of
   rounding (900377259 versus 2 × 450188629). The integrator absorbs that
   0.03 Hz difference.
2. Phase is doubled around the loop. The DAC image at `fclk − f_out` carries
   `−φ_out`. The double pass through the AOM gives `−2φ_out` on the beatnote.
   Undersampling in the second Nyquist zone flips the sign again. So the ADC
   sees `cos(2π f'_in t + 2φ_out − θ_fiber)`, and the loop gain is twice what
   the oscillator alone would suggest. Which of the two zero crossings the loop
   locks to depends only on the sign of the gains. Both signs give a stable
   lock point, so the sign conventions in the mixer do not need to match the
   optics.

Oscillator increments are `round(f / fclk · 2^32)`. The package `dopp_pkg`
holds the two main ones (`PINC_25M76`, `PINC_12M88`). All increments are
run-time inputs, so other plans work without changes. Examples are the
reference loopback with `f_demod = 12.88 MHz`, or an analog front end with
`f_demod = 20 MHz`.

## Signal path

```
adc_data ─► cplx_mixer ─► c2r ─► fir_lp ─► pi_ctrl ─┬─────────────► pert_adder ─► nco (NCO_out) ─► dac_data
  16 bit      ▲  (re,im)  real    error     corr    │                 ▲  sum = pinc_offset      14 bit
              │                                     └─► d2r (capture) │
        nco (NCO_demod)                                 RAM, read port  nco (NCO_pert) × pert_amp
```

| module | does | latency |
|---|---|---|
| `nco` | 32-bit phase accumulator, increment `pinc + pinc_offset`; pipelined CORDIC (`cordic_sincos`) gives cos/sin; optional rounding to 14 bits | accumulator to output 17 clocks, 18 with rounding |
| `cplx_mixer` | `adc·cos`, `−adc·sin` (product with `e^{−jφ}`) at full 32-bit precision | 2 |
| `c2r` | keeps the real part, `>>> 15` with rounding and saturation to 16 bits | 1 |
| `fir_lp` | 21-tap low-pass, 5 MHz cutoff, unity DC gain, transposed form | 2 (+10 samples group delay) |
| `pi_ctrl` | `corr = sat32(kp·e + (Σ ki·e) >>> 16)`, 48-bit saturating integrator, clear input | 2 |
| `pert_adder` | `sum = sat32(corr + pert·pert_amp)` when `pert_en` | 1 |
| `d2r` | captures `DEPTH` words of the PI output, one every `decim+1` clocks, with a registered read port | read 1 |
| `dopp_cancel_top` | wires the above | see below |

### Phase detector

The mixer output's real part is `A/2·[cos(Δφ) + cos(4π f_demod t + …)]`. The
FIR removes the second term: it sits at 51.52 MHz (−61 dB), or at 25.76 MHz in
the 12.88 MHz reference set-up (−52 dB). What is left, `A/2·cos(Δφ)`, is a
cosine phase detector. It is linear only near its zero crossings (±π/2), so the
loop must hold the phase error well inside ±π/2. Its gain scales with the
beatnote amplitude, and so does the loop gain. With a full-scale ADC tone the
detector amplitude is about 16384 LSB.

### Loop gain and delay

The PI output is added to the phase increment of NCO_out, so the controller
steers the output *frequency*. A proportional gain `kp` gives a per-clock loop
gain of about

    g = 2π · kp · A_det · 2 / 2^32      (A_det ≈ 15000–16384, factor 2 from phase doubling)

and a unity-gain frequency `g · fclk / 2π`. Delay limits it. Converters,
the SAW filter, the AOM and the 2 × 90 m of fiber add about 590 clocks
(125 ns + 1.3 µs + 2.5 µs + 880 ns), against 37 clocks for the digital part.
`g · D_total` must stay well below π/2. The end-to-end testbench uses
`kp = 18, ki = 180` (unity gain near 15 kHz, integrator corner near 3 kHz).
For comparison, a bandwidth of about 40 kHz was reached on hardware at the edge
of stability, and about 30 kHz with gains halved.

Digital latency, measured in simulation from an ADC step:

| segment | clocks |
|---|---|
| ADC register → mixer → c2r → FIR → PI → adder → NCO_out accumulator | 9 |
| accumulator → CORDIC (17) → 14-bit rounding (1) → `dac_data` | 18 |
| FIR group delay | 10 |
| **total** | **37 clocks = 301 ns** |

The original platform reported 345 ns for "FIR and other digital blocks".
This design stays below that, so it does not narrow the loop bandwidth further.

## Disturbance-rejection measurement

Normally, noise rejection of a compensated link is measured against a second
link that brings the output back. Here, the loop measures itself:

1. Set `pinc_pert` to the test frequency `f_pert`, choose `pert_amp` and set
   `pert_en`. `pert_adder` adds `sin(2π f_pert t) · pert_amp` to the correction
   word. That is a frequency modulation of the output, just like a fiber
   disturbance would cause.
2. Pulse `d2r_start`. The capture RAM (`d2r`) records the PI output
   (`DEPTH` = 16384 words, one every `d2r_decim + 1` clocks) and raises
   `d2r_done`.
3. Read the RAM through `d2r_rd_addr` / `d2r_rd_data` and fit the component
   at `f_pert`.
4. Repeat with the loop open (`kp = ki = 0`, `int_clr` pulsed) and closed, and
   sweep `f_pert` (3 kHz to 10 MHz was used on hardware).

In closed loop, the PI output at `f_pert` is `−P·L/(1+L)`, where `P` is the
injected term and `L` the open-loop gain. Well inside the bandwidth it cancels
the injection (ratio near 1). Far above the bandwidth it does not respond
(ratio near 0). The residual perturbation that reaches the output is `P/(1+L)`,
which is the rejection curve. The fitting and the sweep run on the board's
processor and are not part of this RTL.

Simulated rejection curves (`tb_rejection_sweep`), using the fiber model
described under Verification, with four gain sets in the ratio 1 : 5 : 10 : 20
(`kp = 2…40`, `ki = 20…400`):

| f_pert | ×1 | ×5 | ×10 | ×20 |
|---|---|---|---|---|
| 3 kHz | +4.1 dB | −10.4 dB | −17.3 dB | −23.7 dB |
| 10 kHz | +0.8 | +1.1 | −3.3 | −9.9 |
| 20 kHz | +0.5 | +2.4 | +2.8 | −1.9 |
| 40 kHz | +0.4 | +2.0 | +4.6 | +12.2 |
| 120 kHz | −0.1 | −0.4 | −0.8 | −1.7 |
| 960 kHz | 0.0 | 0.0 | −0.1 | −0.2 |
| 10.24 MHz | 0.0 | 0.0 | 0.0 | 0.0 |

At every point, the result agrees within 0.25 dB with the discrete-time loop
model written out in that testbench. The ×20 set is close to instability: its
overshoot near 40 kHz reaches +12 dB. In practice you would halve those gains.

Sizing for the sweep: one period at 3 kHz is exactly 40960 clocks. With 16384
words the capture needs `decim ≥ 2`. `decim = 4` spans exactly two periods.
At 10 MHz, capture at the full rate (`decim = 0`).

## Top-level interface (`dopp_cancel_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | 122.88 MHz sample clock; synchronous active-high reset, clears all registers (not the capture RAM contents) |
| `adc_data` | in | 16 s | ADC sample, two's complement |
| `dac_data` | out | 14 s | DAC sample, two's complement (convert to the DAC's format outside) |
| `pinc_demod`, `pinc_out`, `pinc_pert` | in | 32 | oscillator increments `f/fclk·2^32` |
| `kp`, `ki` | in | 16 s | PI gains; both 0 = open loop |
| `int_clr` | in | 1 | clear the integrator |
| `pert_amp`, `pert_en` | in | 16, 1 | perturbation size (unsigned) and enable |
| `d2r_start`, `d2r_decim` | in | 1, 16 | start a capture, keep one sample every `decim+1` |
| `d2r_busy`, `d2r_done` | out | 1 | capture state |
| `d2r_rd_addr`, `d2r_rd_data` | in/out | 14, 32 | capture read port, data one clock after the address |
| `err_mon`, `corr_mon`, `out_phase_mon` | out | 16, 32, 32 | FIR output, PI output, NCO_out accumulator |

On the board, a processor sets the settings and reads the capture RAM. The
register map and bus wrapper are not included: connect the ports to whatever
register interface the platform provides. The converter interfaces are not
included either (ADC data-bus receiver, DAC data-bus driver).

Parameter: `D2R_DEPTH` (default 16384, 512 kbit of block RAM).

## What follows the original design and what is this design's own

Follows it: the block chain and the block names (NCO_demod, mixer,
complex-to-real, FIR, PI, split to the capture RAM, adder with NCO_pert,
NCO_out); converter widths; the 122.88 MHz clock; the frequency plan;
cosine demodulation (real part only); the correction acting on the output
frequency; the perturbation added after the PI; the capture taken right after
the PI; open loop meaning zero PI gains.

This design's own choices, none of them specified by the original:

* the oscillators use a 32-bit accumulator and a 16-stage CORDIC, not a lookup table;
* all word widths, roundings and saturations;
* the FIR (21 taps, 5 MHz cutoff, Hamming window) and its full-rate
  operation (the original filter symbol suggests decimation, but no factor is
  given);
* the gain format and integrator scaling of the PI (`I_SHIFT = 16`);
* the amplitude multiplier of the perturbation;
* the capture RAM depth, decimation, start/done handshake and read port;
* the monitor outputs;
* single clock domain, one sample per clock, synchronous reset.

Left out: arctan demodulation, mentioned only as an option for longer links.
Also left out: the ADC/DAC interfaces, the processor bus, and everything analog
or optical.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with a
model computed in the testbench:

* `tb_nco`: exact accumulator steps; cos/sin within 12 LSB (16 bit) or 4 LSB (14 bit) of the ideal, with the latency above.
* `tb_cplx_mixer`, `tb_c2r`, `tb_pert_adder`, `tb_pi_ctrl`: bit-exact against
  arithmetic models, including rounding ties, both saturation limits and the
  integrator clear.
* `tb_fir_lp`: bit-exact against direct convolution; impulse response and
  latency; DC gain; stop band (> 45 dB at 51.52 MHz) and pass band (1 MHz).
* `tb_d2r`: sample timing for decimations 0 and 2, busy length
  `(DEPTH−1)(decim+1)+1`, start ignored while busy, read latency.
* `tb_dopp_cancel_top`: the whole design at its default size, with a
  behavioural plant, in about one second of simulation:
  * latency checks (9 + 18 clocks, 37 clocks in total);
  * lock in a DAC-to-ADC loopback (12.88 MHz reference set-up);
  * a fiber model with phase doubling, the 590-clock analog delay and a
    2 kHz, 1.5 rad phase disturbance. Open loop, the error swings over
    29800 LSB peak to peak. Closed loop, it stays below 12 % of the detector
    amplitude;
  * the rejection measurement. The PI response relative to the injection is
    about 1.1 at 3 kHz, which is inside the bandwidth, with the usual
    overshoot. It is 0.016 at 960 kHz, and zero in open loop.

  Each of these mechanisms is counted and must occur.
* `tb_rejection_sweep`: the rejection curves above. It runs 56 captures
  through the capture RAM and compares each with the loop model (within 2 dB
  is required up to 1 MHz). It also checks 0 dB far above the bandwidth,
  better low-frequency rejection with more gain, and the overshoot.

The plant in the end-to-end testbench is ideal apart from its delays. It has
no SAW filter roll-off, no amplitude noise and no converter spurs, so loop
bandwidths seen in simulation are optimistic.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/dopp_pkg.sv rtl/*.sv tb/tb_dopp_cancel_top.sv \
    --top-module tb_dopp_cancel_top -o tb && ./obj_dir/tb
```

Replace the testbench file and `--top-module` to run a unit test. For
example, `tb/tb_fir_lp.sv` needs only `rtl/dopp_pkg.sv rtl/fir_lp.sv`.
All rtl files are synthesizable SystemVerilog-2017. The capture RAM is a plain
array with a registered read, so it maps to block RAM. The FIR uses 21
multipliers and each NCO uses 16 CORDIC stages.
