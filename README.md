# PDM microphone to spike-rate interface

A PDM MEMS microphone already speaks in pulses: every cycle of its clock it
sends one bit, and the density of ones encodes the sound pressure. A spiking
audio processor, in contrast, expects *rate-coded* spikes: signed events whose
spacing (the inter-spike interval) carries the value. This design connects the
two without any conversion to multi-bit samples. Each PDM bit becomes one
signed spike, and a spike-domain band-pass filter then redistributes those
spikes in time so that the interval between consecutive output spikes tracks
the audio signal, with the microphone's DC offset and the sigma-delta
high-frequency noise removed.

The design is binaural: two microphones (right and left) share one PDM clock
and each feeds its own filter. Both stages of both ears can also be sent off
chip as address-events (AER) for logging.

```
              pdm_clk (3.125 MHz)
   mic R <-----------+--------------------------------------------+
   mic L <-----------+                                            |
                                                                  |
 pdm_dat_r ---+   +----------------+   pfc_r   +--------+  sbpf_r |
 pdm_dat_l ---+-->| edge detector  |---------->| sbpf R |-------->+---> to spiking processor
                  | (FSM)          |   pfc_l   +--------+  sbpf_l |
                  |                |---------->| sbpf L |-------->+
                  +----------------+           +--------+         |
                       ^ pdm_clk                                  v
              +----------------+                   +------------------------+
  clk 50 MHz->| clock gen /16  |                   | aer_out (8 addresses)  |--> req/ack/addr
              +----------------+                   +------------------------+
```

## Signed spikes

Every spike bus (`psi_pkg::spike_t`) is two wires, `pos` and `neg`. A spike
is one system-clock cycle on one of them. The value a stream represents is
its net rate: positive spikes per second minus negative spikes per second.
All blocks run on the single system clock (50 MHz in the reference system);
nothing in the spike path is asynchronous except the microphone data and the
AER acknowledge, which are synchronised with two flops.

## Front end: clock and edge detector

`pdm_clock_gen` divides the system clock by 16 to produce a 3.125 MHz,
50 %-duty PDM clock, a registered output that drives both microphones.

`pdm_edge_detector` is a two-state FSM that follows the PDM clock level. On
each rising edge it samples every microphone's (synchronised) data bit and,
in the next cycle, emits a positive spike for a one and a negative spike for
a zero. Its output (`pfc_r`, `pfc_l`) is therefore one spike every 16 cycles
per ear, at a constant interval. The information is only in the polarity
mix, and consecutive spikes flip polarity constantly: in simulation of a
500 Hz tone at half scale, about two million polarity changes per second.
A parameter can move individual channels to the falling edge, for
microphones that drive their data on the other clock phase.

## The band-pass filter (`sbpf`)

This is the part that turns the pulse-density stream into properly spaced
spikes. It has three pieces:

```
               +-------------------+   hf   +---------+
 spike_in --+->| slpf  fc=12.02 kHz|------->| +       |
            |  +-------------------+        |   shf   |--> spike_out
            |  +-------------------+   lf   |         |
            +->| slpf  fc=70.2 Hz  |------->| -       |
               +-------------------+        +---------+
```

With both low-pass filters at unity DC gain, the response is

    H(s) = wH/(s + wH) - wL/(s + wL)

so DC cancels exactly and the band between the two corners passes with gain
close to one.

### Spike low-pass filter (`slpf`)

A first-order low-pass filter that works on spike rates, built as a loop:

1. An N-bit signed, saturating integrator counts +1 for each positive input
   spike and -1 for each negative one, and subtracts feedback spikes.
2. A spike generator (`spike_gen`) turns the integrator value x into spikes
   at rate x * K_BW, where K_BW = f_clk / (GEN_DIV * 2^(N-1)). It compares
   |x| with the bit-reversed value of a free-running counter. Over 2^(N-1)
   cycles exactly |x| spikes fire, evenly spread.
3. A spike divider (`spike_div`) passes FB_K out of every 2^FB_M generated
   spikes back to the integrator. A second divider scales the output by
   OUT_K/2^OUT_M. Dividers also use bit reversal to spread the spikes they
   pass.

At equilibrium the feedback rate equals the input rate, which gives
H(s) = k_out*K_BW / (s + k_fb*K_BW). The corner is w_c = k_fb*K_BW and the
DC gain is k_out/k_fb. The design sets OUT = FB, so the DC gain is 1.

| filter | N  | K_BW (1/s)      | k_fb    | corner           |
|--------|----|-----------------|---------|------------------|
| high   | 10 | 50e6/512 = 97656 | 198/256 | 75530 rad/s, 12.02 kHz |
| low    | 16 | 50e6/32768 = 1525.9 | 74/256 | 441.1 rad/s, 70.2 Hz |

The widths follow from the corners. The generator cannot run faster than the
clock, so a 12 kHz corner allows at most 2^(N-1) = 50e6/(2*pi*12e3) = 663,
hence N = 10. At full-scale input the high filter's integrator settles near
±41 and the low filter's near ±7100, both well inside their ranges.

A limit to know: the high filter's generator pattern repeats every 512 cycles
(about 98 kHz), so near and above its corner the output is less smooth than
the ideal filter. At 20 kHz the measured gain is 0.48 against an ideal 0.51.

### Spike hold and fire (`shf`)

Subtracts the rate of its `-` input from the rate of its `+` input. A spike
on `-` counts with inverted sign. The block keeps a small signed count h of
*held* spikes. Each cycle it forms t = h + a - b. If |t| ≥ 2 it fires one
spike of t's sign and keeps t minus that spike; otherwise it fires nothing
and keeps t. The effect is:

* a lone spike is held, not passed on;
* a spike of opposite sign to the held one cancels it, and neither appears;
* a second spike of the same sign releases one spike.

This hold-and-cancel rule is what removes the polarity chatter. Near a zero
crossing of the signal, positive and negative spikes from the two filters
meet and annihilate in the hold stage instead of leaving as alternating
output spikes. At most one spike leaves per cycle. If the inputs together
deliver more than that for long, h is clipped at ±HOLD_MAX (3) and
`overflow` pulses. At audio rates this does not happen. One held spike can
remain indefinitely, a static error of one spike.

## AER output (`aer_out`, in `psi_top`)

Each of the eight spike wires (two ears × two stages × two polarities) has a
one-deep pending flag. A round-robin arbiter picks the next pending wire and
sends its index on a four-phase handshake: `aer_req` rises with the address,
the receiver raises `aer_ack`, `aer_req` falls, the receiver lowers `aer_ack`.
The addresses are:

| addr | ear   | stage        | polarity |
|------|-------|--------------|----------|
| 7 / 6 | left  | front end    | + / −    |
| 5 / 4 | left  | band-pass    | + / −    |
| 3 / 2 | right | front end    | + / −    |
| 1 / 0 | right | band-pass    | + / −    |

For one ear this is the 3/2/1/0 map used when the interface was characterised
on its own. Together the two front-end streams produce 6.25 M events/s, more
than any parallel AER link carries. A spike whose wire is still pending is
dropped and reported on the matching bit of `aer_lost`. The filtered outputs
are at most a few hundred thousand events/s at normal sound levels.

## Timing summary

| path | latency |
|------|---------|
| PDM clock rising edge (register output) to front-end spike | 2 cycles |
| microphone data to the bit that is sampled | 2-flop synchroniser |
| front-end spike to first band-pass spike it can cause | 4 cycles (3 in `slpf`, 1 in `shf`) |
| pending spike to `aer_req` | 2 cycles |

## Behaviour in simulation

All figures below are from the testbenches, with a behavioural
second-order sigma-delta microphone model and a 50 MHz clock.

* 500 Hz tone, amplitude 0.5 and 0.3 of full scale, offsets +0.02 and −0.03
  (`tb_psi_top`, full size). Over 20 ms (10 periods) the filtered output
  changes polarity 20 or 21 times, one change per zero crossing of the tone.
  The front end changes polarity about 40 000 times in the same window. The
  output amplitude is within 0.1 % of 0.5 × 3.125 M × |H(500 Hz)|, and the
  microphone offset is gone.
* The same tone at a realistic listening level is a different matter. At
  about 0.0018 of full scale (65 dB SPL on a microphone of typical
  sensitivity) the output amplitude is still right within 4 %. But the
  filtered stream changes polarity 48 to 72 times in 10 periods instead of
  20: sigma-delta noise inside the 12 kHz band is no longer small against a
  signal of only about 5 500 spikes/s. The reference implementation reported
  exactly one polarity change per zero crossing; this design does not
  reproduce that at low levels. No testbench checks it.
* Sweep (`tb_psi_sweep`): gain 0.27 at 20 Hz, 0.70 at 70 Hz, 0.99 at 1 kHz,
  0.69 at 12 kHz and 0.48 at 20 kHz, each within 0.035 of the ideal
  first-order pair.
* Size: the synthesised binaural interface with its AER port has about 240
  flip-flops. The FPGA implementation this design is modelled on reported 204
  slice registers.

## Where this design departs from, or adds to, its source description

The description this RTL follows fixes the system-level structure: the
divide-by-16 PDM clock, the one-spike-per-bit edge detector with its
polarity rule, and the two-wire signed buses. It also fixes the band-pass
built from a high- and a low-cut-off spike low-pass subtracted by a hold-and-
fire block, and the 3/2/1/0 monitor address map. It gives the band as
roughly 70 Hz to 12 kHz. Everything below is this design's own choice:

* the internal structure of the spike low-pass filter, the spike generator,
  the spike divider and the hold-and-fire rule. These are the simplest
  circuits with the stated function. The integrate-and-generate form matches
  the first-order transfer function with "gain" and "bandwidth generator"
  constants that the source only hints at;
* all filter constants (widths, divider fractions) and the exact corner
  frequencies 70.2 Hz and 12.02 kHz. The measured response the source shows
  has a flatter low end than a 70 Hz first-order corner, and larger phase
  lag; neither was matched;
* sampling on the rising PDM clock edge, the data synchronisers, and the
  option of falling-edge channels;
* the AER handshake polarity, the arbiter, the one-deep buffering, the drop
  reporting and the ear bit of the address;
* saturation of the integrators and the hold count;
* asynchronous active-low reset everywhere.

Not included: the 128-channel neuromorphic auditory sensor that would consume
`sbpf_r`/`sbpf_l`, the microphones themselves (a testbench model stands in)
and the AER-to-USB bridge.

## Files and simulation

`rtl/` holds one module or package per file:

| file | contents |
|------|----------|
| `psi_pkg.sv` | `spike_t`, the PDM divider constant, helper functions |
| `pdm_clock_gen.sv` | PDM clock divider |
| `pdm_edge_detector.sv` | PDM bit to signed spike FSM |
| `spike_gen.sv`, `spike_div.sv` | spike generator and spike-rate divider (parts of `slpf`) |
| `slpf.sv` | spike low-pass filter |
| `shf.sv` | spike hold and fire |
| `sbpf.sv` | spike band-pass filter |
| `aer_out.sv` | spike-to-AER interface |
| `psi_top.sv` | binaural interface, top level |

`tb/` has a self-checking testbench per module (`tb_<module>.sv`), the
sweep testbench `tb_psi_sweep.sv`, and the microphone model
`pdm_mic_model.sv`. Each testbench prints
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/psi_pkg.sv tb/tb_psi_top.sv \
          --top-module tb_psi_top -Mdir obj -o sim && ./obj/sim
```

Run times are a few seconds each; the sweep takes about ten.

To change the band, override the `sbpf` parameters. Each corner is

    f = (FB_K / 2^K_M) × f_clk / (GEN_DIV × 2^(N-1)) / (2π)

FB_K cannot exceed 2^K_M, so N and GEN_DIV set the highest corner a filter
can reach. Then check that the integrator stays in range at full-scale
input: x ≈ 3.125e6 / (k_fb × K_BW) must be below 2^(N-1).

Two microphones that share one data wire (one driving on each clock phase)
are also supported by the edge detector. Wire the line to both of its
channels and set `FALLING_EDGE` for one of them; `psi_top` as written has a
separate data pin per microphone.
