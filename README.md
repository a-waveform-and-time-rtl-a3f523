# Waveform and time digitizer firmware for a TRIDENT hybrid optical module

A TRIDENT hybrid digital optical module (hDOM) carries up to 32 photomultiplier
tubes (PMTs) and a set of SiPM arrays in one glass sphere. Its mainboard
records every PMT pulse in two ways. The pulse is shaped and sampled at
125 MS/s with 16 bits, which gives the charge and the pulse shape. A
comparator also turns the unshaped pulse into a time-over-threshold (ToT)
signal. A time-to-digital converter (TDC) built from the FPGA's carry chain
then time-stamps the rising edge of that signal to about 12 ps. The ADC
gives amplitude and shape, and the TDC gives the arrival time. The 125 MS/s
sampling could not give that time precision on its own. Another 24 SiPM ToT
signals use the same TDCs.

This repository holds SystemVerilog for the FPGA side of such a board: the
logic between the ADC/comparator inputs and the Gigabit Ethernet output. It
follows the mainboard prototype described in *"A waveform and time
digitization mainboard prototype for the hybrid digital optical module of
TRIDENT neutrino experiment"* (G. Zhang, Y. Yang, D. Xu). That paper describes
the board and its measured performance, and gives the firmware only in
outline. Everything below the outline level is this design's own choice;
these choices are marked as such throughout.

## Data flow

```
 ADC 0 (16 ch) --JESD204B--> jesd_transport_demux --+
 ADC 1 (16 ch) --JESD204B--> jesd_transport_demux --+--> 32 x channel_discriminator
                                                          |  baseline, threshold, hit
                                       +------------------+
                                       v                  v
                          coincidence_trigger      32 x waveform_recorder
                                       |           pre-trigger delay, data FIFO,
                                       v           information FIFO
 external trigger ------------> trigger_control ---> read requests
                                       | tdc_keep (trigger-mode gate)
 32 PMT ToT + 24 SiPM ToT ---> 56 x tdc_channel           |
                               carry4_delay_line          |
                               tdc_encoder, hit FIFO      |
                                       |                  |
                                       v                  v
                       tdc_code_density      readout_arbiter (event builder)
                      (one selected channel)             |
                                                           v
                                               ddr3_buffer_ctrl --> DDR3 port
                                                           |
                                                           +--> SiTCP byte port
```

`hdom_mainboard_fpga` is the top. Everything runs on one 250 MHz clock. That
is the 4 ns TDC system clock from the paper. This design also uses it as the
JESD204B core clock. At that clock an ADC delivers one frame every other
cycle. The parts around the FPGA appear as ports: the ADC chips, the
JESD204B link layer and transceivers, the DDR3 chip and its memory
controller, the SiTCP Ethernet core, the White Rabbit timing module, the
clock cleaner, the threshold DAC, the slow ADC, the gyroscope and the HV
control link. The paper designs none of them, or names them only.

## Time base

`ts` is a 48-bit count of 4 ns clock periods. All ADC trigger times and TDC
coarse counts use it. It can be loaded from the White Rabbit time
(`ts_load`, `ts_load_value`). The paper says only that the board takes its
clock from a White Rabbit module. How absolute time reaches the firmware is
this design's assumption.

## ADC path

### Channel separation (`jesd_transport_demux`)

The paper does not give the JESD204B link settings. This design uses L = 4
lanes, M = 16 converters, N' = 16 bits, S = 1 sample per frame and F = 8
octets per lane per frame. That is 10 Gb/s per lane at 125 MS/s. The
receiver core supplies one 32-bit word per lane per cycle, with the first
octet in bits [7:0]. It flags the first word of each frame (`rx_sof`). One
frame therefore takes two words per lane:

| lane | word 0, bytes 0..3                 | word 1, bytes 0..3                 |
|------|------------------------------------|------------------------------------|
| l    | conv 4l MSB, LSB; conv 4l+1 MSB, LSB | conv 4l+2 MSB, LSB; conv 4l+3 MSB, LSB |

All 16 samples appear together one cycle after the second word. A word
without `rx_sof` that does not continue a frame is dropped, so the block
re-aligns itself. ADC `a` feeds channels `16a .. 16a+15`.

### Baseline and threshold (`channel_discriminator`)

Shaped PMT pulses go negative from a baseline of about 0.9 V. A channel
fires when `baseline - sample > threshold` (two's complement samples). The
paper says a self-triggered channel is read out "when the incoming data
exceed the baseline by a configurable threshold". It does not say how the
baseline is found. Here the baseline is an exponential moving average over
2^AVG_SHIFT = 16 samples. The first sample after reset loads it. It is
frozen while the channel is over threshold, so pulses do not drag it. `hit`
marks the first over-threshold sample of a pulse. The deviation is computed
in 18 bits. The largest pulses go from about +0.9 V down to -0.4 V in a
2 Vpp range, about 43,000 counts. That is more than a 16-bit signed value
holds, and 18 bits keep it from wrapping.

### Trigger modes (`trigger_control`, `coincidence_trigger`)

| mode         | `trig_mode` | what is read out |
|--------------|-------------|------------------|
| self         | 0           | each channel on its own hit; quiet channels produce nothing (zero suppression) |
| coincidence  | 1           | all channels, when at least `coinc_mult` channels have hit within `coinc_window` samples |
| external     | 2           | all channels, on the rising edge of `ext_trig_in` (e.g. a laser's trigger output) |

The coincidence logic keeps a per-channel counter. A hit opens the window,
which then stays open for `coinc_window` further samples. The trigger fires
in the cycle the number of open windows reaches `coinc_mult`. It does not
fire again until that number has dropped below `coinc_mult`. Hits may arrive
on any cycle, so the two ADCs need not deliver frames in the same cycle. The
paper does not say which channels a coincidence reads out. Reading all of
them is this design's choice.

### Pre-trigger capture (`waveform_recorder`)

Each channel keeps a circular buffer of PRE = 128 samples. The samples
leaving it are PRE samples old. A record copies LEN = 256 consecutive
samples of this delayed stream into the data FIFO, two samples per 32-bit
word. The record therefore starts 128 samples (1.024 µs) before the sample
that arrived with the trigger. It ends 128 samples after it. When the last
word is written, an entry goes into a separate information FIFO. The entry
holds the mode, the trigger time, the baseline and the length. The paper
specifies pre-trigger FIFOs and separate data and information FIFOs. The
window sizes are this design's choice. The paper's recorded waveforms show
sample indices 100 to 150, so a record is at least 151 samples long.

A request is accepted only if the channel is idle and both FIFOs have room
for a whole record. Otherwise it is dropped and counted in `adc_drops`. The
default data FIFO holds 512 words, that is four records. Requests that
arrive while a record is being written are ignored, because that record
already covers them.

## TDC path

### Delay line (`carry4_delay_line`, behavioural model)

In the FPGA each TDC channel is a chain of 96 CARRY4 cells with 4 taps each:
384 taps of about 12 ps on average, roughly 4.5 ns in all, which is longer
than one 4 ns clock period. The ToT signal runs along the chain. At every clock edge
the flip-flop behind each tap captures what has reached it. Tap 0 holds the
newest value and tap 383 the oldest. This chain is an FPGA
primitive placed by hand, not synthesizable RTL. The file is therefore a
behavioural model. It rebuilds the ToT level at `t_edge - delay(i)` for
every tap from the last rising and falling edges of ToT. The real tap delays
vary; the paper measures DNL from -1 to +2 LSB. The model spreads its tap
delays deterministically between 0.5 and 1.5 times the mean, with a
different pattern per channel. The real line spans two FPGA clock regions,
and the measured DNL shows a feature around fine code 180 where it crosses
their boundaries. The model stands this in with a run of 24 taps centred on
tap 180 (`BND_TAP`, `BND_HALF`) that are 0.4 times as long as elsewhere. Only
the position of this feature comes from the measurement; its shape is
invented. With it the line is about 4.4 ns long and the mean tap 11.5 ps.
The model's DNL spans about -0.8 to +0.7 LSB and its INL about ±7 LSB. The
paper measured -1 to +2 LSB and -3 to +10 LSB; the model does not try to
match those curves.

### Coarse and fine count (`tdc_encoder`)

After a rising ToT edge, the snapshot reads `1...10...0`: ones on the taps
the edge has passed. The fine count is the number of ones. Counting ones
rather than finding the first zero tolerates the bubbles that uneven taps
cause near the edge. A new edge is taken when tap 0 is high now and was low
in the previous snapshot. The coarse count is the time stamp right after
the sampling edge. The edge time is therefore

```
t_hit = t(clock edge at which ts became coarse) - fine * t_tap,   t_tap ~ 12 ps
```

and after calibration

```
t_hit = t(edge) - (sum_{i < fine} w_i + w_fine / 2),   w_i = 4 ns * N_i / N_total
```

which takes the middle of the code's span.

Here N_i is the code-density histogram (below). Code 0 never occurs. An
edge that has not yet reached tap 0 at a clock edge is caught one clock
later with a code near the top of the line. The codes therefore cover edge
ages from d_0 to d_0 + 4 ns, where d_0 is the delay up to tap 0. The
histogram cannot measure d_0. It adds to the per-channel constant that the
channel-offset calibration removes. ToT pulses, and the gaps between them,
must each last more than one clock period (4 ns). A hit
reaches the channel's 16-entry FIFO three cycles after its sampling edge.

### Following the trigger mode (`tdc_keep`)

The paper says TDC data are "recorded depending on the trigger mode" and
gives no detail. In self-trigger mode every hit is kept. In the coincidence
and external modes, hits are kept for `tdc_gate_len` cycles after each
global trigger. The ADC trigger comes later than the ToT edge of the same
pulse, because of the shaping and the JESD204B latency. A hit that comes
before its trigger is therefore lost in these modes. The gate is the
simplest rule that follows the mode. It is not the paper's.

### Code-density calibration (`tdc_code_density`)

If many hits arrive at times unrelated to the clock, each fine code is hit
in proportion to the width of its tap. One TDC channel, chosen by
`cd_channel`, feeds a 384-bin histogram of 24-bit saturating counters. The
DAQ reads it bin by bin and derives:

```
w_i   = 4 ns * N_i / N_total          (tap width)
DNL_i = N_i / mean(N) - 1             (LSB)
INL_k = sum_{i <= k} DNL_i            (LSB)
```

`tb/tb_tdc_calibration.sv` runs this procedure on two full-size channels.
It sends 100,000 random hits to each channel and reads back the
histogram. It checks every derived code width against the model's true tap
delay, within counting error, and checks that the narrow run near code 180
shows up. It then times 2000 edges sent to both channels at once, using the
measured widths. After each channel's constant offset is removed, every
time is within 20 ps of the true edge. The two channels differ by 6 to
9 ps RMS. The paper measured about 12 ps, but the model has no noise or
clock jitter.

The paper uses SPE dark pulses as the random source, in situ. Whether the
original firmware fills the histogram in the FPGA or offline is not stated.
The channel-to-channel offsets (cable and input delays) are calibrated
offline from common-time events. They need no firmware.

## Event stream

`readout_arbiter` serves the 32 ADC channels and 56 TDC channels in
round-robin order, one whole record at a time. It writes 32-bit words:

```
ADC record   {4'hA, mode[1:0], channel[5:0], 4'h0, nsamples[15:0]}
             {16'h0, ts[47:32]}
             {ts[31:0]}                 trigger time, 4 ns ticks
             {16'h0, baseline[15:0]}
             nsamples/2 words {sample[2k], sample[2k+1]}
TDC record   {4'hC, 2'b00, channel[5:0], 11'h0, fine[8:0]}
             {16'h0, coarse[47:32]}
             {coarse[31:0]}
filler       32'h0
```

TDC channels 0 to 31 are the PMT inputs and 32 to 55 the SiPM inputs. The
formats are this design's own.

## DDR3 buffer and Ethernet (`ddr3_buffer_ctrl`)

The event builder can produce one word per cycle (8 Gb/s), while Gigabit
Ethernet carries 1 Gb/s. The paper buffers the data in a 2 Gbit DDR3 chip.
The block packs four words into a 128-bit memory word (first word in bits
[31:0]). It writes these to a ring of 2^24 addresses and reads them back in
order. It hands them to SiTCP one byte per cycle, most significant byte of
each 32-bit word first. A partly filled memory word is padded with filler
words once the input has been idle for 16 cycles. When the ring is full,
`in_ready` falls. The back-pressure then reaches the channel FIFOs, which
drop whole records and count them.

The memory port is a simple command interface, not a vendor DDR3 controller
interface. Commands are taken on `mem_cmd_valid && mem_ready`, and read data
return in order on `mem_rd_valid`. An adapter to the actual controller is
needed on hardware. The SiTCP port has the usual shape of that core's
transmit side: byte, write strobe and full flag.

## Parameters

| parameter (top)  | default | origin |
|------------------|---------|--------|
| `N_PMT_P`        | 32      | paper: 32 PMT channels (two 16-channel ADCs) |
| `N_SIPM_P`       | 24      | paper: 24 SiPM ToT inputs |
| `N_CARRY4_P`     | 96      | paper: 96 CARRY4 per delay line (384 taps) |
| sample width     | 16      | paper (package constant `SAMPLE_W`) |
| clock            | 4 ns    | paper: TDC system clock |
| `LANES`          | 4       | assumed JESD204B link |
| `PRE`, `LEN`     | 128, 256| assumed record window |
| `DATA_DEPTH`     | 512     | assumed, 32-bit words per channel (four records) |
| `INFO_DEPTH`     | 4       | assumed |
| `TDC_FIFO_DEPTH` | 16      | assumed |
| `MEM_ADDR_W`     | 24      | 2 Gbit DDR3 = 2^24 x 128 bit |
| `AVG_SHIFT`      | 4       | assumed baseline averaging |

Run-time settings are top-level inputs: `trig_mode`, per-channel
`threshold`, `coinc_window`, `coinc_mult`, `tdc_gate_len` and the
calibration controls. A slow-control register file would drive them on a
board. The paper does not describe one.

## Files

`rtl/trident_pkg.sv` holds shared constants, the trigger-mode enum and the
record structures. `rtl/sync_fifo.sv` is the first-word-fall-through FIFO
used for every FIFO. Each other file in `rtl/` is one block above. Each has
a self-checking testbench `tb/tb_<module>.sv`. `tb/ddr3_mem_model.sv` is a
behavioural memory with random latency and random not-ready cycles.

`tb/tb_hdom_mainboard_fpga.sv` runs the whole design at its default size.
It generates JESD204B frames of noisy baselines with injected pulses, and
asynchronous ToT pulses. It decodes every byte that leaves the SiTCP port
and checks each record:

* each ADC record must be a window of what that ADC channel sent, placed PRE
  samples ahead of its trigger;
* each TDC record must give the injected edge time within 20 ps, using the
  model's true tap delays in place of a calibration.

It runs through the following, counts each mechanism and fails if one never
happened:

* self trigger;
* coincidence trigger, including rejection of a lone hit;
* TDC hits inside and outside the gate;
* external trigger after a White Rabbit time load;
* record FIFO overflow under a high trigger rate, where records plus counted
  drops must equal the triggers;
* SiTCP back-pressure;
* the code-density histogram.

It takes well under a minute. Every testbench also passes when all
registers start at random values (`+verilator+rand+reset+2`). Nothing in
the design relies on power-up values. All control state is reset. The
histogram clears itself after reset. A recorder accepts no trigger until
its delay buffer has been filled once. The DDR3 buffer issues no command
or byte while `rst` is high.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb rtl/trident_pkg.sv \
          tb/tb_hdom_mainboard_fpga.sv --top-module tb_hdom_mainboard_fpga
./obj_dir/Vtb_hdom_mainboard_fpga
```

Replace the name to run any block's testbench. Each prints
`TB_RESULT checks=N failures=M`. To lint the synthesizable part:
`verilator --lint-only -Wall -y rtl rtl/trident_pkg.sv rtl/<module>.sv`.

## How far to trust it

* The paper gives these: the channel counts, sample rate and width, the
  three trigger modes, pre-trigger FIFOs, separate data and information
  FIFOs, DDR3 buffering, SiTCP readout, the 96-CARRY4 delay line with a
  4 ns coarse clock and about 12 ps taps, and code-density calibration.
* This design supplies these: the JESD204B link settings, the baseline
  algorithm, the coincidence window rule, the record window and FIFO sizes,
  the TDC gate in the non-self modes, the record format, the memory and
  SiTCP port shapes, and the single-clock arrangement.
* The delay line is a behavioural model. On hardware it must be built as a
  carry chain with fixed placement, which this RTL cannot express. Synthesis
  tools therefore see `tdc_channel` and `hdom_mainboard_fpga`, which contain
  it, as incomplete. The crossing of the two clock regions is only roughed
  in, as a run of narrow taps. Every other block is plain synthesizable RTL.
* Not implemented: the SPI and I2C links to the threshold DAC, slow acoustic
  ADC, gyroscope and HV board (their devices and protocols are not given);
  JESD204B link-layer functions (SYNC, SYSREF alignment); a slow-control
  register interface; data over the White Rabbit link (the paper lists it
  as future work).
* All tap delays are fixed, so the model has no jitter. Simulated
  resolutions are therefore better than measured ones.
