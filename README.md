# Programmable-logic signal processing for a 4–8 GHz microwave SQUID multiplexer readout

A microwave SQUID multiplexer couples each cryogenic detector to a superconducting
resonator, and it puts a few hundred resonators, at different frequencies between
4 and 8 GHz, on a single transmission line. To read it out, you send a comb of probe
tones, one per resonator, down the line. Each returning tone carries the signal of its
own detector as a slow modulation. The room-temperature electronics therefore do two
jobs:

* **Transmit:** synthesise the comb.
* **Receive:** separate the returning tones again and bring each one down to DC.

This RTL is the digital core of such a readout. The 4–8 GHz band is cut into five
independent subbands of 800 MHz. Each subband has:

* an I/Q DAC pair at 1 GS/s,
* an analog IQ mixer, and
* an ADC whose built-in digital down-converter (DDC) delivers two 500 MS/s complex
  streams, the lower and the upper sideband.

The logic here generates the five combs and corrects their IQ imbalance. It also splits
each of the ten received streams into 64 overlapping channels and demodulates one tone
per channel to baseband.

```
            cfg (one register write per clock)
             |
   +---------+------------------------------------------------------+
   |  tone_gen[s] (80 tones) --> iq_corr[s] --> dac_out[s]   s=0..4 |   to DAC pairs
   |                                                                |
   |  adc_in[r] --> rx_stream[r]                             r=0..9 |   from ADC/DDC
   |                  +--> pfb_channelizer A ---------> chan_nco_lpf A --> ch_a[r]
   |                  +--> freq_shift --> pfb_channelizer B --> chan_nco_lpf B --> ch_b[r]
   +----------------------------------------------------------------+
```

The top is `echo_sdr_top`. Streams `2s` and `2s+1` are the lower and upper sideband of
subband `s`. Each `ch_a[r]` and `ch_b[r]` is a time-multiplexed stream of
`{valid, channel, I/Q}` samples.

The design stops at the demodulated channel streams. The later steps of a complete
readout need algorithms this design does not define, so they are not included:

* flux-ramp demodulation, which turns the slow modulation back into the detector signal;
* event detection;
* storage or forwarding to a host.

The converters, mixers and clocking are analog hardware and are not included either.

## Sample rates and the single clock

All logic runs on one clock, which stands for the 1 GS/s DAC sample rate:

* Each `tone_gen` produces one complex sample per clock.
* An ADC sideband stream (500 MS/s) is presented with `adc_valid` high on every other
  clock.
* A 32-channel channelizer decimates by 32, so each channel runs at 15.625 MS/s. The 32
  channel samples of a block leave one per clock. At 500 MS/s input this keeps the
  output port half busy.

A physical implementation at 1 GS/s would process several samples per fabric clock.
This RTL keeps one sample per clock so the arithmetic stays easy to read and to check.
That is the largest structural difference from a deployable design.

## Transmit side

### Comb generation (`tone_gen`)

The comb is built by direct digital synthesis. Each of the 80 tones has:

* a 32-bit phase accumulator, stepped once per sample by its frequency word
  (f = inc/2³² · 1 GS/s; a negative word gives a negative baseband frequency);
* a 16-bit amplitude in DAC LSBs.

All tones read a shared 1024-entry Q15 sine table. The 80 complex products are summed
in full precision, rounded and saturated to 16 bits. `clip` flags any saturated sample,
so software can see when the comb is too hot. Equalising the tone powers is a matter of
writing the amplitudes.

One extra modulation oscillator can amplitude-modulate any subset of the tones:

    a_t = amp_t · (1 + depth · sin(φ_am))

It has a frequency word and a Q15 depth, and each tone has an enable bit. In a
room-temperature loopback the modulation stands in for the periodic SQUID response
under a flux ramp. That lets the whole receive chain, through to a demodulated channel,
be exercised without a cryostat.

A write to the sync register resets every phase, so the next sample is computed at
phase 0.

### IQ pre-correction (`iq_corr`)

Unequal gain and phase in the analog I and Q paths leave an image of every tone at the
mirrored frequency. `iq_corr` multiplies each sample by a programmable 2×2 real matrix
in Q2.14:

    I' = ii·I + iq·Q
    Q' = qi·I + qq·Q

The result is rounded and saturated. With the inverse of the analog imbalance
programmed, the image cancels. Finding that matrix is left to a software calibration.
The matrices reset to identity.

## Receive side: two overlapping channelizer banks

This is the part that takes the most thought.

### One bank (`pfb_channelizer`)

A critically sampled polyphase filter bank computes 32 channels at once. Channel *k* is
the input, filtered by a prototype lowpass `h`, shifted to k/32 of the sample rate and
decimated by 32:

    y_k[m] = Σ_n h[n] · e^{+j2πkn/32} · x[32m − n]

Writing n = p + 32q splits this into 32 branch filters of T = 16 taps, followed by a
32-point inverse DFT over the branch outputs:

    v_p[m] = Σ_q h[p+32q] · x[32m − p − 32q]
    y_k[m] = Σ_p e^{+j2πkp/32} · v_p[m]

The hardware uses the fact that each new input sample is the *newest* sample needed by
exactly one branch:

* An input counter selects that branch and computes its 16-tap sum from a 512-sample
  delay line.
* The branches therefore complete in the order p = 31, 30, …, 0. The block closes on the
  sample where the counter wraps.
* The 32 branch sums are then copied into a second buffer. A direct DFT emits one bin
  per clock from that buffer while the next block is collected.

Bin k appears k+2 clocks after the sample that closed its block. An immediate assertion
fires if a block closes before the previous DFT has finished, which happens only if
input arrives faster than one sample per clock.

The prototype is a 512-tap Blackman-windowed sinc. Its cutoff is half the channel
spacing and its sum is normalised to 1, so a tone at a channel centre keeps its
amplitude. The coefficients are computed at elaboration time by constant functions in
`echo_pkg`, so there is no coefficient file.

At 500 MS/s the channel spacing is 15.625 MHz and each channel is flat over about
±5 MHz. Towards the channel edges the response falls off. Channels further away are
suppressed by far more than 55 dB; the testbench measures below −80 dB.

### The second bank (`freq_shift` + a second `pfb_channelizer`)

A tone halfway between two bank-A channel centres sits on the falling edges of both
channels. To cover that case, a second identical bank works on a copy of the stream
shifted down by half a channel spacing (multiplied by e^{−jπn/32}). Its channel k is
centred at (k + ½) · 15.625 MHz, exactly in bank A's stop band. Together, the two banks
give 64 overlapping channels per stream. Each tone is assigned to whichever bank has a
channel centre nearest to it, so it is at most about 3.9 MHz from a centre and in the
flat region.

Bank B's output is one clock behind bank A's, because of the shifter's register.

### Per-channel demodulation (`chan_nco_lpf`)

Behind each bank, one time-multiplexed datapath serves all 32 channels in two stages.

**Stage 1: NCO.** Each channel has a 32-bit NCO phase, which moves by its own frequency
word on each of that channel's samples (f = inc/2³² · 15.625 MHz). The sample is
multiplied by the conjugate phasor, which moves the tone's offset from the channel
centre to DC.

**Stage 2: lowpass.** A 32-tap FIR with a 1.6 MHz cutoff filters the result. Each
channel keeps its own history, and the filter has unit DC gain. It removes anything not
near the tone:

* the neighbouring channel's tones that leak through the channelizer's transition band;
* wideband noise.

The output keeps the channel index and arrives two clocks after the input. The filter
does not decimate, so the channel rate is unchanged.

The demodulated sample of a channel is the complex envelope of its tone: a constant for
an unmodulated tone, and the slow modulation when a detector (or the test AM) is
present.

## Configuration map

Configuration is one write per clock on `cfg = {we, addr[19:0], data[31:0]}`.
`addr[19:15]` selects the unit:

| unit    | target                | local address                        | data |
|---------|-----------------------|--------------------------------------|------|
| 0–4     | `tone_gen` of subband | `addr[8:7]=0`, `addr[6:0]`=tone      | frequency word |
|         |                       | `addr[8:7]=1`, `addr[6:0]`=tone      | `[15:0]` amplitude, `[16]` AM enable |
|         |                       | `addr[8:7]=2`, `addr[6:0]`=0 / 1 / 2 | AM frequency word / AM depth (Q15) / sync |
| 5–9     | IQ matrix of subband  | `addr[1:0]` = ii, iq, qi, qq         | `[15:0]` Q2.14 |
| 10–19   | stream NCOs           | `addr[6]` bank, `addr[5:0]` channel  | NCO frequency word |

## Fixed-point choices

* Samples are 16-bit signed I and Q throughout (`cplx_t`).
* Intermediate sums are full width.
* Every stage rounds half-up and saturates back to 16 bits, using `sat16` in
  `echo_pkg`.
* Sine and twiddle tables use amplitude 32767, so ±1 can be represented.
* Filter taps are 18-bit signed values. The channelizer's taps sum to 2²¹ and the
  lowpass's taps to 2¹⁷.

## What follows the described system and what is chosen here

Taken from the described system:

* five 800 MHz subbands;
* 80 tones per subband;
* I and Q synthesised digitally for 1 GS/s DACs;
* per-tone adjustable power;
* digital AM of the carrier for loopback tests;
* IQ-imbalance compensation on the generated I/Q;
* ten 500 MS/s sideband streams;
* 32-channel polyphase channelizers, doubled by a second bank on a frequency-shifted
  copy to 64 overlapping channels;
* a tunable NCO and a 1.6 MHz lowpass per channel.

Chosen here, because the description does not give them:

* all word widths and table sizes;
* the prototype filter and lowpass designs, their lengths and windows;
* the exact half-spacing shift and its direction;
* the direct (non-FFT) DFT;
* the single-sample-per-clock architecture;
* the register map;
* the AM waveform;
* the general 2×2 form of the IQ correction.

Known departures:

* The channel passband is about 10 MHz flat, against the 11 MHz stated for the original
  channelizer. A longer prototype would widen it.
* A real 1 GS/s implementation needs a parallel (multi-sample-per-clock) datapath and an
  FFT in place of the direct DFT.
* The per-channel lowpass does not decimate, so its output rate is the channel rate.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…` and has a watchdog.

| testbench | what is compared |
|-----------|------------------|
| `iq_corr_tb` | Random inputs and matrices against an integer model, including saturation. |
| `freq_shift_tb` | Random input against a floating-point rotation (±2.5 LSB), plus a tone moved by exactly fs/64. |
| `tone_gen_tb` | 80 tones, some modulated, against a floating-point synthesis model, sample by sample. Checks sync and `clip`. |
| `pfb_channelizer_tb` | Every output bin against a floating-point evaluation of the defining sum. Checks the k+2 latency. Measures channel isolation. |
| `chan_nco_lpf_tb` | Per-sample floating-point NCO and FIR model. A tone 0.2 MHz off passes; a tone 5 MHz off is rejected. |
| `rx_stream_tb` | Tones in bank A and bank B channels come out at DC with the right amplitude. Crosstalk into other channels; bank B's one-clock lag. |
| `echo_sdr_top_tb` | Full default size (5 × 80 tones, 10 × 64 channels) with no parameter overrides. See below. |

`echo_sdr_top_tb` runs a behavioural loopback:

* a DAC-to-ADC path, with an analog IQ imbalance of 5 % gain and 3° phase on two of the
  subbands;
* a DDC model that splits each subband into its two 500 MS/s sidebands.

It then counts each mechanism:

* tones demodulated to DC in both banks;
* the AM swing of a modulated tone;
* lowpass rejection of a tone 5 MHz off its NCO;
* images visible without IQ correction;
* images below −40 dBc with the inverse matrix programmed.

A testbench fails if any of these mechanisms never happens.

To simulate one block with plain Verilator, pass the package first:

```
verilator --binary --timing -Wno-fatal -Irtl rtl/echo_pkg.sv rtl/pfb_channelizer.sv \
          tb/pfb_channelizer_tb.sv --top-module pfb_channelizer_tb
./obj_dir/Vpfb_channelizer_tb
```

For the full system, list all of `rtl/*.sv` (package first) and `tb/echo_sdr_top_tb.sv`.
The run takes a few seconds once built.

Notes for changing the design:

* The coefficient tables use `$sin`/`$cos` in constant functions. Verilator and
  slang-based tools accept these; other tools may need the tables precomputed.
* The designs are sized by parameters: `M`, `T` and `NTAPS` on the receive side, `NT`
  and `NS` on the transmit side. Their defaults are the system sizes given above.
