# Flexible ADC channel: one converter for transient recording and real-time streaming

Magnetic pick-up coils on a fusion experiment give the time derivative of the
field, dB/dt. Two kinds of users want that signal at the same time. Physicists
want the full-rate waveform (up to 1 MS/s) around interesting moments, read
back after the discharge. The plasma controller wants a low-rate version
(10 kHz), delivered promptly, and it also wants the field itself, B, which is
the time integral of the coil signal. The usual answer is two ADC channels per
probe plus an analog integrator. The architecture described by Rigoni et al.
for RFX-mod2 (a Zynq SoC: ARM cores plus FPGA fabric) instead digitises each
probe once and does everything else in the FPGA:

* a **transient recorder**: a circular buffer that always holds the recent
  history, and a trigger (external, or the signal going over a threshold)
  that freezes a window of pre- and post-trigger samples and hands it to a
  DMA engine;
* a **real-time stream**: a low-pass filter and sub-sampler whose output goes
  to a FIFO that the processor drains and sends out over UDP;
* a **digital integrator** that turns the one ADC input into two channels,
  dB/dt and B.

This repository is synthesizable SystemVerilog for the FPGA part of one such
channel, with a self-checking testbench for every block. The source
publication describes what each FPGA block does but not how it is built, so
nearly every internal detail here (filter type, state machine, word formats,
widths, serial waveform) is a design choice of this implementation; the
choices are listed at the end and in each file's header.

## Block diagram

```
            ext_clk  ext_trig
               |        |
          +----v--------v----+
          |   clk_trig_mgr   |  2-FF synchronizers, rising-edge pulses
          +----+--------+----+
   sample_tick |        | ext_trig_pulse
          +----v-----+  |
 ADC <--->| adc_     |  |
 cnv,sclk | serial_if|  |
 sdo,busy +----+-----+  |
               | sample, sample_valid (18-bit, full rate)
       +-------+-------------------+
       |                           |
+------v--------------+   +--------v-----------------------------+
| signal_elab         |   | transient_recorder                   |
|  lpf_decimator      |   |  level_trigger --+                   |
|  (boxcar, /ratio)   |   |  ext_trig -------+-> trig select     |
|  integrator (48 b)  |   |  record_ctrl <-> circ_buffer (8192)  |
|  packet builder     |   |                                      |
+------+--------------+   +--------+---------------------+-------+
       | 3-word packets            | window              | irq
       |          +----------------+ (rec_to_fifo = 1)   |
+------v----------v---+            | (rec_to_fifo = 0)   |
| axis_pkt_mux (tid)  |            |                     |
+------+--------------+            |                     |
       | s_axis                    | d_axis              |
       v                           v                     v
  AXI-Stream FIFO             AXI DMA engine         processor
  (vendor IP)                 (vendor IP)
```

Everything runs on one fabric clock `clk`; the timing figures below assume
125 MHz. The configuration registers arrive as one packed struct `cfg`
(`flex_adc_pkg::cfg_t`) and the status counters leave as `status`
(`status_t`); in a Zynq build both would be wired to a register-bank IP on
the processor's general-purpose AXI port.

## The transient recorder

This is the part with the most behaviour. `record_ctrl` writes every
full-rate sample into `circ_buffer` at a write pointer that wraps around
(the depth is a power of two), and steps through five states
(`rec_state_e`, visible in `status.rec_state`):

| state     | writes samples | what it waits for                                   |
|-----------|----------------|-----------------------------------------------------|
| REC_IDLE  | no             | `cfg.rec_arm` = 1                                    |
| REC_FILL  | yes            | `pre_samples` samples written (history is complete) |
| REC_ARMED | yes (overwrites oldest) | a trigger                                  |
| REC_POST  | yes            | `post_samples` more samples written                 |
| REC_READ  | no             | the whole window accepted by the DMA engine          |

**Which samples form the window.** At the trigger the controller notes
`rd_start = wptr - pre_samples` (counting a sample written in the trigger
cycle itself as already written). The window is then the `pre_samples`
samples up to and including the last one written at or before the trigger,
followed by the next `post_samples` samples, `pre + post` words in all,
oldest first. With the level trigger the trigger pulse follows its crossing
sample by one cycle, and ADC samples are always many cycles apart, so the
sample that crossed the threshold is the last pre-trigger sample of its
window. `pre_samples + post_samples` must not exceed the buffer depth (an
assertion watches this).

**Readout.** In REC_READ the window leaves on `d_axis_*`, one sample per
32-bit word (sign-extended), `tlast` on the last word, at one word per two
clock cycles when the DMA side is ready (one cycle to read the RAM, one to
present the word; the word is held while `tready` is low). A window of 5000
samples goes out in 80 us at 125 MHz. When the last word is accepted, `irq`
pulses for one cycle and `status.windows_done` counts up.

**Re-arming and lost triggers.** With `cfg.rec_continuous` set, the recorder
goes back to REC_FILL after every window and rebuilds the pre-trigger
history, so it can catch events one after another for as long as it stays
armed (the beam-source use case: thousands of breakdown events in a two-hour
pulse, each recorded as its own window). Writing stops during readout, so
samples arriving then are not recorded. A trigger that comes in any state
other than REC_ARMED (during FILL, POST or READ, or while disarmed) is not
taken and is counted in `status.trig_missed`. Clearing `cfg.rec_arm` returns
to REC_IDLE at once, except during readout, which always completes so the
DMA engine never sees a truncated window.

**Trigger sources** (`cfg.trig_src`): `TRIG_EXT` uses the external trigger
input; `TRIG_LEVEL` uses `level_trigger`, which fires once each time a sample
goes above `cfg.threshold` (signed compare) after a sample at or below it,
so a long excursion gives one trigger, not one per sample; `TRIG_ANY` takes
either.

## The real-time stream and the integrator

`lpf_decimator` is a boxcar filter evaluated once per output: it adds
`cfg.decim_ratio` consecutive samples (default 100: 1 MS/s in, 10 kHz out)
and emits the sum. The sum is not divided; the receiver divides by the
ratio. A boxcar has its first spectral zero at the output rate, which is the
simplest anti-alias filter that fits the job; a sharper filter can replace
it without touching the rest.

`integrator` keeps the running sum of every full-rate sample in 48 bits
(rectangle rule). Ten seconds of full-scale 18-bit input at 1 MS/s sums to
about 1.3e12, under 2^41, so the accumulator cannot overflow in any
discharge. `cfg.integ_clear` holds it at zero, e.g. until the discharge
starts. Conversion to tesla (sample period, coil area) is left to software.
The integral is also available at full rate on the top-level `integral`
port.

`signal_elab` joins the two. Each time the decimator closes a group it
captures the group's sum together with the integral up to the same sample
(they update in the same cycle) and sends one three-word packet on
`s_axis_*`:

| word | content                                      |
|------|----------------------------------------------|
| 0    | boxcar sum, sign-extended to 32 bits         |
| 1    | integral bits 31..0                          |
| 2    | integral bits 47..32, sign-extended; `tlast` |

If the FIFO is still refusing the previous packet when the next group
closes, the new packet is dropped and `status.stream_dropped` counts it. For
a control loop a fresh value is worth more than an old one, and the
processor can see from the counter that values were lost. With
`cfg.stream_en` low the decimator is held at the start of a group and no
packets are sent; the integrator keeps running.

## The converter interface

The channel is built around an 18-bit SAR converter (fully differential
input, up to 2 MS/s) read over a four-wire serial link that passes through
isolation and LVDS drivers. `adc_serial_if` implements that link as
follows:

```
sample_tick  _|‾|________________________________________________
adc_cnv      __|‾‾‾‾|____________________________________________   CNV_CYCLES
adc_busy     ___|‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾|_____________________________   conversion
adc_sclk     ______________________|‾|_|‾|_| ... |‾|_____________   18 periods
adc_sdo      ====================X b17 X b16 X ... X b0 X=======
sample_valid ____________________________________________|‾|____
```

The module raises `adc_cnv` for `CNV_CYCLES` clocks, waits until `adc_busy`
has risen and fallen again, then produces 18 `adc_sclk` periods of
`2*SCLK_DIV` clocks. It captures `adc_sdo` on each rising edge of `adc_sclk`,
MSB first; the converter is expected to present the MSB when busy falls and
the next bit after each falling edge. The result is two's complement. One
conversion costs `CNV_CYCLES + t_conv + 36*SCLK_DIV + 2` clocks, plus 3 for
the sample-clock synchronizer. A `sample_tick` that arrives during a
conversion is dropped and counted in `status.adc_overruns`. Note that
`adc_sdo` and `adc_busy` are used without synchronizers: the receive path
outside this module must deliver them in the `clk` domain.

## Windows through the stream FIFO

The DMA engine is the normal path for recorded windows. A smaller system may
prefer to read everything from the one FIFO, and the event-recording set-up
that preceded this design did exactly that. With `cfg.rec_to_fifo` set, the
recorder's output is sent to `axis_pkt_mux` instead of `d_axis_*`, which
then stays idle. The multiplexer merges it with the stream packets on
`s_axis_*` a whole packet at a time, so a window of 5000 words is never split
by a stream packet and vice versa. At each packet boundary the stream
packets have priority. `s_axis_tid` tells the receiver which is which: 0
marks a stream packet and 1 a window word. While a long window holds the
port, stream packets wait in `signal_elab`. A wait longer than one stream
period drops packets, and they are counted as usual. At 2 clocks per window
word, a 5000-word window holds the port for 80 us, less than one 100 us
stream period. Change `rec_to_fifo` only while the recorder is disarmed.

## Clock and trigger inputs

`clk_trig_mgr` brings the external sample clock and the external trigger
into the `clk` domain through two-flip-flop synchronizers and turns each
rising edge into a one-cycle pulse, three clocks after the edge. Each pulse
of `sample_tick` starts one conversion, so the sampling rate is set by the
external clock. The architecture also foresees extracting clock and trigger
from a timing-highway signal that carries both in one coded line. That
decoder is **not included**, because the line coding is not available; the
highway would feed the same two pulses.

## Configuration and status

| `cfg_t` field    | meaning                                              |
|------------------|------------------------------------------------------|
| `decim_ratio`    | samples per streamed value (0 acts as 1)             |
| `stream_en`      | enable the sub-sampled stream                        |
| `integ_clear`    | hold the integrator at zero                          |
| `trig_src`       | `TRIG_EXT`, `TRIG_LEVEL` or `TRIG_ANY`               |
| `threshold`      | level-trigger threshold (18-bit signed)              |
| `pre_samples`    | window samples before and including the trigger      |
| `post_samples`   | window samples after the trigger                     |
| `rec_arm`        | enable the recorder                                  |
| `rec_continuous` | re-arm after each window                             |
| `rec_to_fifo`    | send windows to the stream FIFO port, not the DMA    |

`status_t` holds `rec_state` and 16-bit wrapping counters: `trig_taken`,
`windows_done`, `trig_missed`, `stream_dropped` and `adc_overruns`.

Configuration fields are read live. Change `pre_samples`, `post_samples` and
`trig_src` only while `rec_arm` is low.

## Sizes and rates

| item                        | value                         | origin                                  |
|-----------------------------|-------------------------------|-----------------------------------------|
| sample width                | 18 bits                       | the converter                           |
| full-rate sampling          | up to 1 MS/s                  | application requirement                 |
| stream rate                 | 10 kHz (`decim_ratio` = 100)  | application requirement                 |
| circular buffer             | 8192 samples (`DEPTH`)        | chosen: holds a 1 ms window at 5 MS/s   |
| integrator                  | 48 bits                       | chosen: 10 s at 1 MS/s needs 41         |
| stream / DMA word           | 32 bits                       | chosen                                  |
| fabric clock                | 125 MHz                       | assumed for the timing figures          |

At 125 MHz and 1 MS/s a sample period is 125 clocks, and a conversion needs
43 clocks plus the converter's conversion time. The 2 MS/s maximum of the
converter (62.5 clocks) is reachable only if its conversion time is under
about 156 ns. The 5 MS/s event recording of the beam-source application was
done with a different, parallel ADC: the recorder itself accepts a sample
every clock, but this serial interface cannot deliver 5 MS/s. A 5000-sample
window (1 ms at 5 MS/s) fits the 8192-sample buffer.

Synthesised for a generic target, the whole channel is about 340 word-level
cells, 425 flip-flops and one 8192 x 18-bit memory (147,456 bits, four 36 Kb block RAMs on a Zynq).

## Where this design goes beyond, or falls short of, the description it follows

Taken from the architecture description: the partition into a clock/trigger
block, a signal-elaboration block and a trigger/circular-buffer block; a
single converter serving recording, streaming and integration; the 18-bit
serial converter with a four-wire link; 1 MS/s recording and a 10 kHz
stream; low-pass filtering before sub-sampling; external and threshold
triggers; pre- and post-trigger windows handed to a DMA engine; a stream
FIFO drained by the processor; an interrupt line to the processor.

Choices of this implementation: the boxcar filter; the rectangle-rule
integrator and its width; the serial waveform and the use of `busy`; the
recorder state machine, including stopping writes during readout and
refusing triggers outside REC_ARMED; re-arming by a configuration bit;
triggering on the upward crossing; the packet and window word formats; the
drop-newest policy of the stream; the packet-level merge of windows into the
FIFO port, with stream priority and `tid` marking; the status counters; asynchronous
active-low reset; the buffer depth.

Not included: the timing-highway decoder (coding unknown); the vendor IP
around the channel (register bank, AXI-Stream FIFO, AXI DMA), which the top
level connects to through plain ports; the analog front end, the converter
and the isolated LVDS link; all processor software.
Integrator drift or offset correction is not described and is not built, so
a DC offset at the converter input integrates into a ramp.

## Files

`rtl/` (one unit per file):

| file                     | content                                            |
|--------------------------|----------------------------------------------------|
| `flex_adc_pkg.sv`        | widths, `cfg_t`, `status_t`, enums                 |
| `flex_adc_top.sv`        | the channel; status counters and `irq`             |
| `clk_trig_mgr.sv`        | external clock/trigger synchronizers               |
| `adc_serial_if.sv`       | converter serial interface                         |
| `signal_elab.sv`         | stream packet builder around the two units below   |
| `lpf_decimator.sv`       | boxcar low-pass filter and sub-sampler             |
| `integrator.sv`          | 48-bit running integral                            |
| `transient_recorder.sv`  | trigger selection around the three units below     |
| `level_trigger.sv`       | threshold-crossing trigger                         |
| `record_ctrl.sv`         | pre/post-trigger state machine and window readout  |
| `circ_buffer.sv`         | dual-port RAM of the circular buffer               |
| `axis_pkt_mux.sv`        | packet-level merge of windows into the FIFO port   |

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), two
application testbenches described below, and
`adc_model.sv`, a behavioural model of the converter's serial output (a
fixed conversion time, then MSB first, next bit on each falling `sclk`).
Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_flex_adc_top` runs the whole channel at its default parameters: a
125 MHz clock, a 1 MHz external sample clock, the converter model fed with a
known ramp plus spikes, 1000 + 4000 sample windows and a ratio of 100. It
checks four windows word by word (three level-triggered, one external; one
of them sent through the stream-FIFO port between stream packets), every
stream packet's sum and integral, the counters and the interrupts. It also
makes each mechanism happen at least once and counts it: a refused trigger,
continuous re-arm, DMA backpressure, stream packets dropped while the FIFO
is held full, converter overruns from a too-fast sample clock, an
integrator clear, and a window routed to the FIFO. It simulates about 20,000
samples in a few seconds.

Two more testbenches run the channel, at its default parameters, on
signals shaped like the two applications:

* `tb_probe_integration` is field reconstruction from a pick-up coil. The
  input is a dB/dt signal: eight positive pulses, a quiet stretch, then eight
  negative pulses of the same area, on top of a small noise. The 10 s of a
  real field test are compressed to 200 ms (200,000 samples). Every
  streamed integral is compared with the exact sum. The test also checks
  that the integral climbs in eight equal steps, holds on the plateau, and
  ends at the noise sum alone.
* `tb_event_recording` is event capture. The input is about twenty
  events at irregular spacing (3,000 to 12,000 samples), each a jump that
  decays exponentially. The recorder runs with the level trigger in
  continuous mode and 1000 + 4000 sample windows. Every window that reaches
  the DMA port is matched word by word against the input around its
  triggering crossing. Events that arrive while a window is still being
  written or read must show up in `trig_missed`; the test checks that
  recorded plus missed equals the number of events. It runs at 1 MS/s, the
  rate the serial converter allows, not 5 MS/s.

Each of these runs in 10 to 15 s.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/flex_adc_pkg.sv tb/tb_flex_adc_top.sv --top-module tb_flex_adc_top
./obj_dir/Vtb_flex_adc_top
```

Replace `flex_adc_top` with any other module name to run its testbench.
Adding `+verilator+rand+reset+2` to the run line starts every
uninitialised variable at a random value. The testbenches pass that way
too, which shows that nothing depends on power-up values.
Lint with `verilator --lint-only -Wall -y rtl rtl/flex_adc_pkg.sv rtl/<module>.sv`.
The only warnings are unused package constants and `SYNCASYNCNET`. The latter
comes from the assertions sampling the asynchronous reset in `disable iff`,
and is harmless.

## Changing it

* `DEPTH` on `flex_adc_top` sets the circular buffer size (power of two). The
  16-bit `pre_samples`/`post_samples` fields allow windows up to 65535 + 65535,
  so depths beyond 65536 also need `CNT_W` raised in the package.
* `SCLK_DIV` and `CNV_CYCLES` adapt the serial timing to a slower link or
  isolator.
* The filter can be replaced inside `lpf_decimator` as long as it keeps the
  one-cycle `out_valid` that `signal_elab` aligns with the integrator.
* Several channels would instantiate `flex_adc_top` once per converter. The
  configuration would then be per channel, and the streams would be merged
  before the FIFO.
