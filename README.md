# Binaural event-based CAR-FAC cochlea

This is synthesizable SystemVerilog for a two-ear silicon cochlea. It turns
stereo audio into streams of spikes (address events). Each ear is a CAR-FAC
cochlea model (Cascade of Asymmetric Resonators with Fast-Acting Compression).
Its output goes through lateral inhibition to a bank of leaky integrate-and-fire
(LIF) neurons. A host computer receives the spikes and extracts spectro-temporal
features from them. The design follows the FPGA system described in *Event-driven
Spectrotemporal Feature Extraction and Classification using a Silicon Cochlea
Model* (Xu, Perera, Bethi, Afshar, van Schaik). That system is 2 ears × 64
channels × 9 neurons, and those are this RTL's default sizes.

The main idea of the hardware is time multiplexing. An ear does not need 64
filter sections. Each ear has one arithmetic datapath: one CAR section, one outer
hair cell (OHC), one inner hair cell (IHC), one lateral-inhibition unit and one
LIF unit. All 64 channels share it, one channel per clock, and each channel
keeps its coefficients and state in memories indexed by channel number. The
feature extraction that uses the spikes (time surfaces and the FEAST
feature learner) runs in software on the host. It is not part of this RTL.

## Signal chain of one channel

Numbers are signed fixed point, Q7.24: 32 bits, 24 of them fractional. The range
is about ±128 and the resolution is 6·10⁻⁸. Products are truncated. Two
rational functions use a combinational divider. Channel 0 is the basal,
highest-frequency end and receives the audio sample. Channel *c* receives the
basilar-membrane (BM) output of channel *c−1* from the same sample.

| unit | per-channel state | computation |
|---|---|---|
| OHC, `dohc` | BM velocity *v* | *u* = scale·*v* + offset; *r* = r1 + d_rz·(1−*b*)/(1+*u*²); *r* = r1 when the FAC is off |
| CAR, `car_stage` | W0 = *z1*, W1 = *z2*, last BM output | *z1'* = *r*(a0·*z1* − c0·*z2*) + *x*; *z2'* = *r*(c0·*z1* + a0·*z2*); *y* = g(*x* + h·*z2'*); *v* = *y* − *y*<sub>old</sub> |
| IHC, `dihc` | ac, cap, l1, l2 | hp = *y* − ac; *z* = max(hp + 0.13, 0); cond = *z*³/(*z*³+*z*²+0.1); q = cond·cap; cap += c_in(1−cap) − c_out·q; two one-pole low-pass filters give the IHC output |
| AGC, `agc` | accumulator and 4 stage states | see below; stage 0 is *b* |
| lateral inhibition | – | *x*<sub>LI</sub> = max(ihc<sub>c</sub> − k·(ihc<sub>c−1</sub> + ihc<sub>c+1</sub>)/2, 0) |
| LIF ×9, `lif_neuron` | 9 membrane potentials | *V* += c_LIF·(*x*<sub>LI</sub> − *V*); if *V* > Vth<sub>j</sub>: spike, *V* = V_reset |

The coefficients a0 and c0 are the cosine and sine of the pole angle. r1 is the
minimum pole radius, and d_rz is how far the OHC may raise it. h places the
zero, and g sets the section gain. The host computes and writes all of them, one
set per channel. The LIF constant is c_LIF = 1/(f_s·τ_LIF). With τ_LIF = 10 ms and
an assumed f_s = 20 kHz it is 0.005. The spike threshold is 0.0004 and
V_reset = 0.

Each channel has nine neurons. They share one input and differ only in their
thresholds. The source system names three levels (low, medium, high) for the
nine neurons but gives only the medium one. Here each neuron has its own
writable threshold. At reset, neurons 0–2 get 0.0002, 3–5 get 0.0004 and 6–8 get
0.0008.

## The channel pipeline

This is the part that needs the most care. `ear_controller` waits for an audio
sample strobe. It then issues channel slots 0…N−1 on consecutive clocks. Each
slot moves down a register pipeline inside `car_fac_ear`:

| clock after slot *c* is issued | stage | reads | writes |
|---|---|---|---|
| 0 | OHC | BM velocity[*c*], *b*[*c*], r1, d_rz | pipeline register *r* |
| 1 | CAR | W0, W1, a0, c0, h, g, BM[*c*]; BM output of *c−1* (previous clock) | W0, W1, BM, velocity[*c*] |
| 2 | IHC + AGC accumulate | IHC state[*c*] | IHC state[*c*], accumulator[*c*] |
| 3 | wait | | |
| 4 | lateral inhibition + LIF | IHC output of *c−1*, *c*, *c+1*; LIF memory[*c*] | LIF memory[*c*], spike vector |

The order OHC → CAR → IHC/AGC → LIF is the one the source system uses. The CAR
cascade is the only serial dependency inside a sample. Issuing channels in
order, one per clock, satisfies it: the CAR stage always has the previous
channel's output in a register. Lateral inhibition needs the *next* channel's
IHC value of the same sample. That value appears one clock after the channel's
own value, so the LIF stage runs one clock later than it otherwise would. A
neighbour that does not exist (channel 0's left, the last active channel's
right) counts as zero.

After the last slot the controller waits 5 clocks for the pipeline to drain.
It then starts the AGC update and waits for it to finish. Only then does it
accept the next sample. With M active channels, one sample costs M + 8
clocks, counted from the strobe, plus 3·M clocks for each AGC stage that is
due. M is 64 unless the host lowers it (register 7, below). On every 64th
sample all four stages are due. With M = 64 that sample costs 840 clocks, so real-time
operation at 20 kHz needs a clock of at least 16.8 MHz. A strobe that arrives
while the ear is busy is dropped, and a sticky `overrun` flag is set.

## Automatic gain control

The AGC keeps an accumulator per channel, summing the IHC output over
the samples. It has four smoothing stages, updated every 8, 16, 32 and 64
samples. When stage *k* is due:

1. **Averages move up.** Go from stage 0 to the slowest due stage. Stage 0's
   input is its accumulator divided by 8, and each later stage's input is its
   accumulator divided by 2. Each stage's input is added to the next stage's
   accumulator.
2. **Stages update, slowest first.** For each channel, tmp = s<sub>k</sub> +
   ε<sub>k</sub>·(in<sub>k</sub> + mix·s<sub>k+1</sub> − s<sub>k</sub>). Then a
   3-tap spatial filter across channels sets s<sub>k</sub> = tmp<sub>c−1</sub>/4 +
   tmp<sub>c</sub>/2 + tmp<sub>c+1</sub>/4. An edge channel (channel 0 or the
   last active channel) uses its own value in place of the missing neighbour.

The engine handles one channel per clock. Moving the averages takes one pass per
due stage; updating takes two passes per due stage (low-pass, then spatial
filter). Stage 0's state is *b*. The OHC of the same channel reads it in the
next sample.

## Host interface

`carfac_binaural_top` has plain ports where the host link and the audio codec
connect. The USB link and the codec themselves are not part of this RTL.

* **Parameter writes:** `host_wr_valid`, a 16-bit address and 32-bit data.
  * Address bits [15:12] = 0 or 1 select the coefficient memories of ear 0 or
    ear 1. Bits [11:8] select a0, c0, r1, h, g or d_rz (0–5), and bits [7:0]
    select the channel.
  * Address bits [15:12] = 2 select the registers. The register index is in
    bits [7:0]:
    * 0: control. Bit 0 turns ear 0 on, bit 1 ear 1, bit 2 the FAC; bit 3
      selects host audio.
    * 1–6: OHC scale and offset, then the IHC coefficients ac, in, out and lpf.
    * 7: number of active channels minus 1, shared by both ears. It resets
      to 255, and values above 63 mean all 64 channels. Lowering it shortens
      each sample; the channels above it stop running and send nothing. This
      is how the number of channels is changed at run time.
    * 8–11: AGC ε₀…ε₃.
    * 12: AGC mix. 13: lateral-inhibition strength. 14: c_LIF. 15: V_reset.
    * 16–24: the nine thresholds.
  * The coefficient memories are not reset, so the host must load them before
    it sends audio. The registers reset to usable values (listed in
    `sync_control.sv`).
* **Audio:** 16-bit stereo PCM from the codec (`codec_*`) or from the host
  (`host_audio_*`), chosen by control bit 3. Full scale maps to ±1.0. The left
  channel feeds ear 0 and the right channel ear 1.
* **Spikes:** a valid/ready stream of `aer_event_t` words. Each word holds the
  ear, a 23-bit sample index, the channel, and a 9-bit vector of which neurons
  fired. One word covers one channel of one ear in one sample, and is sent
  only if at least one neuron fired. Each ear queues its words in a 64-word
  FIFO. The two FIFOs are merged round-robin. When a FIFO is full, new words
  are dropped and counted in `drop_count0`/`drop_count1`.
* **Observation:** `bm_valid`/`bm_ch`/`bm_y` show each ear's BM output slot by
  slot. `agc_fired`, `busy` and `overrun` give status.

## Modes

* **Single ear:** clearing an ear's enable bit makes it ignore sample
  strobes. It then produces no BM outputs and no events, and its state and
  sample index freeze.
* **Linear CAR:** clearing the FAC bit sets the pole radius of every
  channel to r1. The OHC nonlinearity and the AGC feedback then have no
  effect. The IHC, AGC and neurons keep running, so spikes are still
  produced.

## What comes from the source system and what is this design's own

The following are as described in the source system:
* two ears, each with one time-multiplexed CAR-FAC datapath, a controller
  and an interface module;
* the unit order OHC → CAR → IHC/AGC → LIF;
* the per-channel memories (a0, c0, W0, W1, r, g, BM, IHC, LIF);
* the OHC inputs (scale, offset, r1, d_rz, *b*);
* the IHC offset 0.13;
* the AGC with an accumulator, four stages at 8/16/32/64 samples and a 3-tap
  spatial filter;
* lateral inhibition before the neurons;
* the LIF equations, τ_LIF = 10 ms, V_reset = 0 and threshold 0.0004;
* nine neurons per channel, 64 channels and the ear-off and FAC-off modes.

The source system gives these only as blocks, so the formulas here come from
the published CAR-FAC model:
* the CAR section update;
* the OHC nonlinearity 1/(1+*u*²);
* the IHC rational function and capacitor model;
* the AGC recursion, its mix term and the ¼, ½, ¼ filter taps.

The source draws the two nonlinearities with three multipliers each. Here each
is a multiplier chain followed by a divider.

These are this design's own choices:
* the Q7.24 number format;
* one clock per pipeline slot, and the extra slot before lateral inhibition;
* the subtractive form of lateral inhibition and its strength 0.25;
* the pole radius is passed in a pipeline register, not an "r memory";
* the BM velocity is kept as a second BM memory word;
* the serial AGC engine after each sample;
* the reset values;
* which neuron gets which threshold, and the low and high values;
* the host address map, including how the channel count is changed;
* the event word, the FIFOs, dropping when full, and the round-robin merge;
* the 20 kHz sample rate assumed for the reset value of c_LIF.

## Files

| file | content |
|---|---|
| `rtl/cochlea_pkg.sv` | number format, `fx_mul`/`fx_div`, configuration record, address map, event word |
| `rtl/car_stage.sv`, `dohc.sv`, `dihc.sv`, `lateral_inhibition.sv`, `lif_neuron.sv` | combinational units used once per ear |
| `rtl/agc.sv` | AGC memories and update engine |
| `rtl/ear_controller.sv` | slot sequencer, drain, AGC start, overrun |
| `rtl/car_fac_ear.sv` | one ear: memories, pipeline, controller, AGC |
| `rtl/aer_interface.sv` | per-ear event FIFO |
| `rtl/sync_control.sv` | host write decoder, registers, audio source selection |
| `rtl/carfac_binaural_top.sv` | top level |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/tb_fx_pkg.sv`, `tb/ear_model_pkg.sv` | fixed-point helpers and a bit-exact reference model of an ear |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/cochlea_pkg.sv tb/tb_fx_pkg.sv tb/ear_model_pkg.sv \
  tb/carfac_binaural_top_tb.sv --top-module carfac_binaural_top_tb -o sim
obj_dir/sim
```

Verilator finds the other modules through `-Irtl`. Substitute any other
testbench name. Add `-Wno-fatal` if your Verilator treats lint warnings as
errors during the build.

What the testbenches check:

* **Combinational units:** the unit testbenches compare the datapath units
  with the same equations evaluated in floating point, over random operands.
* **AGC:** `agc_tb` compares every stage state with a floating-point model
  over 200 samples. It also checks which stages fire and how many clocks each
  update takes.
* **One ear:** `car_fac_ear_tb` runs an 8-channel ear on a two-tone signal.
  It compares every BM output and every spike, bit for bit, with the reference
  model in `ear_model_pkg`. It also checks the clock count of every sample,
  switches to linear mode partway through, and later drops to 5 active
  channels.
* **Whole system:** `carfac_binaural_top_tb` runs the whole design at its
  default size (2 × 64 channels × 9 neurons) for 200 stereo samples, taking
  about 10 s of simulation. It configures everything through the host port
  and compares both ears' BM outputs bit for bit. It checks that every
  expected event arrives in order, or is accounted for by the drop counter.
  It drives each mechanism at least once:
  * AGC updates;
  * an overrun strobe;
  * FIFO overflow under a stalled host link;
  * linear mode;
  * single-ear mode;
  * host audio;
  * contention between the two ears for the link;
  * a lowered channel count (40 channels for the last 20 samples).

## Limits

* No saturation anywhere: very loud input or badly chosen coefficients wrap
  around. With ±1.0 full-scale input and stable coefficients (r < 1), the
  values stay far inside Q7.24.
* The two dividers are combinational and wide (56/32 bits). On an FPGA they
  limit the clock. A pipelined or iterative divider, or the source system's
  multiplier-only approximations, would be the next step.
* The state memories are flip-flops cleared at reset. Block RAM with a
  clearing sweep would be more economical on an FPGA.
* The absolute CAR-FAC coefficients are the host's job. The testbenches
  build a small filter bank (geometric pole spacing, 6 kHz down to 150 Hz);
  it is not a calibrated human-cochlea design.
