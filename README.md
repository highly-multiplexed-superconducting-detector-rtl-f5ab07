# Frequency-multiplexed MKID readout: programmable-logic datapath in SystemVerilog

A Microwave Kinetic Inductance Detector (MKID) is a superconducting LC
resonator. Up to 2048 of them hang off one microwave feedline, each tuned to
its own frequency between 4 and 8 GHz, about 2 MHz apart. A photon absorbed
in one resonator briefly shifts its resonance, which shows up as a pulse in
the phase of a probe tone sent at that resonator's frequency. Reading the
array out therefore means: send a comb of 2048 probe tones, receive the comb
back, separate every tone from the others, turn each one into a phase time
stream, and look for pulses in all 2048 streams at once, in real time.

This repository holds RTL for the digital part of such a readout, as built
on an RFSoC-class FPGA with integrated 4.096 GSPS converters. It follows the
block design of the MKID readout described by J. P. Smith, J. I. Bailey III
and B. A. Mazin, "Highly-Multiplexed Superconducting Detector Readout:
Approachable High-Speed FPGA Design", where the blocks were written in
high-level synthesis; it is called the reference design below. That publication gives the chain of blocks, their bus
widths, clock rates and sizes, and what each block does. It does not give
how most of them work inside. Everything below that is not a bus width, a
rate, a size or a block's stated purpose is a choice made for this RTL.
Each file's header comment says which parts are which.

## The signal chain

```
 ADC I, ADC Q (4.096 GSPS, 2 x 128 bit per 512 MHz cycle) ----------------+
      |                                                                   |
 [filter bank, 4096 bins, 2x oversampled]   (outside this RTL)            |
      | 512 bit: 16 bins / cycle                                          |
 bin_select ---- 256 bit: 8 channels / cycle ---+                         |
      |                                         |                         |
 ddc (tone to DC, 500 kHz lowpass, decim. 2)    |                         |
      | 256 bit + keep mask ----------------+   |                         |
 phase_convert (CORDIC atan)                |   |                         |
      | 64 bit: 4 phases / cycle          iq_switch                       |
 matched_filter                             |                             |
      | 64 bit                          capture_core (IQ)     capture_core (ADC)
 photon_trigger                             |                             |
      | up to 4 photon records / cycle      v                             v
 data_out ----------------------------> memory write ports (256-bit words)

 dac_replay (256 MHz): 2 MiB waveform table -> DAC I, DAC Q (2 x 128 bit)
```

All of it except `dac_replay` runs on one 512 MHz clock. The receive chain
never stalls: the converters cannot wait, so every block takes one beat per
cycle and produces one beat per cycle. Only the paths into memory have
back-pressure, and they absorb it in FIFOs and count what they lose.

| point in the chain | bus | per 512 MHz cycle | rate per channel |
|---|---|---|---|
| ADC pair | 2 x 128 bit | 8 I + 8 Q samples | 4.096 GS/s |
| filter-bank output | 512 bit | 16 bins | 2 MHz per bin |
| bin selection, DDC | 256 bit | 8 channels | 2 MHz |
| phase, matched filter | 64 bit | 4 phases | 1 MHz |

Complex samples are 16-bit I in the low half and 16-bit Q in the high half
of a 32-bit word (`mkid_pkg::iq_t`). Phases are signed 16-bit numbers with
the full circle equal to 2^16 (so +-32768 is +-pi).

## Frames, beats and slots: where each channel is on the bus

This is the one thing to understand before reading any of the modules. 2048
channels share a bus that carries 8 (later 4) of them at a time, so every
block is time-multiplexed, and every per-channel quantity (a phase
accumulator, a filter delay line, a threshold) lives in a small memory that
is read and written at the address of the channel currently on the bus.

* A **frame** is one sample of every bin or channel: 256 cycles, 0.5 us.
* A **beat** k (0..255) is one cycle of a frame. On the filter-bank bus beat
  k carries bins 16k..16k+15. After bin selection it carries channels
  8k..8k+7, lane l being channel 8k+l. Every stream from bin selection on
  carries its beat number alongside, so no block has to count.
* After decimation by 2 there are 4 phases per cycle and one decimated
  sample of every channel takes two frames, a **sweep** of 512 cycles. A
  **slot** s (0..511) is one cycle of a sweep, and lane j of slot s is
  channel 4s + j. The slots come in the order 0, 2, 4, ... 510 (first
  frame), then 1, 3, ... 511 (second frame). Slot s = {beat, half}: the even
  slot of a beat carries that beat's lower four channels, the odd slot its
  upper four.

Memories in the 8-lane blocks are organised per lane and addressed by beat;
those in the 4-lane blocks per lane and addressed by slot. A configuration
write for channel c therefore goes to lane c mod 8 (or c mod 4), address
c / 8 (or c / 4).

## Bin selection

The filter bank splits the 4.096 GHz band into 4096 overlapping bins, 2 MHz
wide and 1 MHz apart, so every tone lies well inside at least one bin. Some
bins then hold two tones and most of the rest none. Bin selection turns 4096
bins into 2048 channels, one per tone: a bin with two tones is sent to two
channels, a bin with no tone to none.

`bin_select` holds a map, one entry per output channel, naming the bin it
takes. The incoming frame is written into one half of a 2 x 4096-entry frame
store while the previous frame is read out of the other half through the
map, 8 channels per cycle. Since 4096/16 = 2048/8, input and output frames
are the same 256 cycles long and the stream flows without gaps, one frame
late. The frame store needs 8 independent reads per cycle; an FPGA build
would replicate or bank it.

## Down-conversion, lowpass and decimation

Within its channel each tone sits somewhere in +-1 MHz. `ddc` moves it to
0 Hz: a 16-bit phase accumulator per channel advances by the channel's
programmed increment every frame, and a CORDIC rotates the sample by minus
that phase (direct digital synthesis without a sine table). Writing an
increment also clears that channel's accumulator.

A 7-tap half-band filter per channel,
`y[n] = (-x[n] + 9x[n-2] + 16x[n-3] + 9x[n-4] - x[n-6]) / 32`,
then removes everything beyond 500 kHz (a quarter of the 2 MHz channel
rate; its gain is 1 at DC, 1/2 at 500 kHz and 0 at 1 MHz). This is what
separates the two tones of a duplicated bin: in each of the two channels the
other tone is off-centre and is attenuated.

Decimation by 2 is where this RTL does something less obvious. Keeping every
second frame would leave the phase stage idle half of the time and busy with
8 channels per cycle the other half. Instead, on even frames the lower four
lanes of every beat are kept, on odd frames the upper four. Every channel
still keeps every second sample, and exactly 4 kept samples come out on
every cycle, so the 4-lane phase path runs without a buffer. The price is
that channels 8k+4..8k+7 are sampled one channel period (0.5 us) after
channels 8k..8k+3, which is harmless for independent resonators. `ddc`
outputs all 8 lanes, filtered at the full rate, with a keep mask; the IQ
capture sees the full-rate stream.

## Phase and matched filter

`phase_convert` picks the kept half of each beat and converts the four
samples to phase with four pipelined 16-iteration CORDIC arctangents. The
accuracy is about +-3 LSB of the 16-bit phase for any input magnitude above
a few hundred.

`matched_filter` applies, for every channel, an FIR filter whose
coefficients are loaded at run time (16 taps of Q1.15 by default). In use
they are the matched filter measured for that resonator during calibration;
they can be rewritten at any time. Delay lines are per channel, so a channel
whose coefficients change keeps its history.

## Photon trigger and records

`photon_trigger` compares every filtered phase with its channel's threshold.
A sample above the threshold while the channel is not holding off is a
photon: a 64-bit record {time, channel, phase} goes out and the channel then
ignores the next `holdoff` samples, so one pulse gives one record. Time is
counted in sweeps, i.e. in microseconds at full rate. Writing a threshold
also ends the channel's hold-off.

`data_out` queues up to four records per cycle in per-lane FIFOs, merges
them round robin, packs four records per 256-bit word (record k in bits
64k+63..64k) and writes the words to a ring buffer in memory. `wr_ptr` is
the next slot to be written; the host reads behind it. A record that meets a
full FIFO is dropped and counted in `dropped`. A partly filled word waits
for its fourth record.

Which sign a photon pulse has depends on how the resonator and the probe
phase are set up; this trigger fires on excursions above the threshold.

## Captures and the switch

Two instances of `capture_core` record a stretch of a stream to memory on
command (base word address, number of beats, start). The ADC capture takes
the raw converter words ({Q, I}, 256 bits) and starts at once. The IQ
capture takes either the bin-selected or the down-converted channel stream,
chosen by `iq_switch`, and always begins with the first beat of a frame, so
word j of a capture holds channels 8(j mod 256)..+7. Both write through a
16-deep FIFO; beats that find it full are lost and counted in `overflow`,
the capture still ends with the requested number of words.

`iq_switch` changes its selection only at frame boundaries. The two streams
it chooses from are offset in time by the down-converter latency, so it
first lets the old stream finish its frame and then drops beats of the new
stream until that stream's next frame starts. The capture never sees a
partial or mixed frame.

## Waveform replay

`dac_replay` holds the probe waveform, computed in software, in a 65536 x
256-bit table (2 MiB). Each word is 8 samples for DAC I (low half) and 8 for
DAC Q (high half). While `run` is high it plays words 0..len-1 round and
round, one per 256 MHz cycle, with two cycles of read latency. Eight 16-bit
samples per 256 MHz cycle is 2.048 GS/s, so at a 4.096 GSPS converter rate
this word layout assumes the converter interpolates by 2. Making the tones
exact periodic within the table length avoids a phase jump at the wrap.

## Control, clocks and resets

Configuration is a plain write bus in the 512 MHz domain, standing in for the
processor's register interface (`cfg_we`, `cfg_addr[23:0]`, `cfg_wdata`).
Clocking the control writes at the data rate, rather than giving each block
a second, slow control clock, keeps every block single-clock; the reference
design found this the better choice for timing. The processor's bus bridge
would do the crossing from its own clock.

| `cfg_addr[23:20]` | target | index in `cfg_addr` | data |
|---|---|---|---|
| 0 | bin map | channel | bin number |
| 1 | DDC increment | channel | phase step, 16 bit |
| 2 | FIR coefficient | {channel, tap} | Q1.15 |
| 3 | trigger threshold | channel | signed 16 bit |
| 4 | trigger hold-off | channel | samples |
| 5 | registers | [3:0] | 0 switch select, 1/2/3 IQ base/beats/start, 4/5/6 ADC base/beats/start, 7/8 photon ring base/size, 9 photon enable |

The DAC table and replay controls (`lut_*`, `dac_run`, `dac_len`) are in the
256 MHz `dac_clk` domain. The memory write ports are valid/ready ports of
256-bit words in the 512 MHz domain; crossing to the memory controller's
clock is left to the interconnect.

Resets are kept to the minimum, as in the reference design where nearly
every reset was removed to help timing: only valid flags, counters and
pointers are reset. Memories are not, which is why per-channel state is
cleared when it is programmed (increment writes clear the DDS accumulator,
threshold writes clear the hold-off) and why filter outputs are meaningful
only once a channel's delay lines have filled (7 frames for the half-band,
the tap count for the matched filter).

## What is not here

* The **polyphase filter bank** (4096 bins, 2x oversampled) is an earlier,
  separately published design built on vendor FIR and FFT cores; its
  output enters the top as `opfb_data/opfb_valid/opfb_last`, assumed in
  natural bin order.
* The **RF data converters**, their PLLs and the **clock generator** are hard
  analog IP; the ADC words enter and the DAC words leave as ports.
* The **processor**, the **bus interconnect** and the **DDR memory
  controller** are vendor parts; a simple configuration bus and three memory
  write ports take their place.

Points where this RTL departs from, or adds to, what the reference design
states: the CORDIC-based DDS and the 7-tap half-band filter; the
lane-alternating decimation; the phase format; the matched filter's tap
count and number format; the trigger rule (threshold plus hold-off) and the
photon record layout, neither of which the reference gives and neither of
which its authors had yet put on hardware; the whole of `data_out`; the
frame alignment of the IQ capture and the switch; the DAC word layout. The
convert-to-phase, matched-filter and switch blocks were vendor cores in the
reference design and are written out here with the same function.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M` and stops itself. Most run at reduced sizes
through the modules' parameters. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/mkid_pkg.sv \
    tb/tb_ddc.sv --top-module tb_ddc -Mdir obj_ddc
./obj_ddc/Vtb_ddc
```

| testbench | what it shows |
|---|---|
| `tb_bin_select` | mapping, duplication, dropping, map rewrite, one-frame latency |
| `tb_ddc` | tones moved to DC with amplitude kept; rejection at 1 MHz, half gain at 500 kHz; keep pattern; 20-cycle latency |
| `tb_phase_convert` | phase within 3 LSB of atan2, slot order, 19-cycle latency |
| `tb_matched_filter` | per-channel FIR against a reference, coefficient reload, 2-cycle latency |
| `tb_photon_trigger` | events and hold-off against a reference model, time counter |
| `tb_data_out` | record packing, ring addresses, per-lane order, overflow accounting |
| `tb_capture_core` | contiguous capture, back-pressure, overflow, frame alignment |
| `tb_iq_switch` | whole, unmixed frames across switches between continuous streams |
| `tb_dac_replay` | replay order, wrap-around at `len` and at the table end, latency |
| `tb_mkid_readout_top` | the whole chain at 64 bins / 32 channels |
| `tb_mkid_readout_top_full` | the whole chain at the default 4096 bins / 2048 channels / 2 MiB table |

The two end-to-end testbenches share `tb/tb_top_env.sv`. It builds a
synthetic comb: one tone per channel at a random offset, every eighth
channel sharing its bin with its neighbour (a bin holding two tones), and
the remaining bins empty. It checks an ADC capture, a
bin-selected capture (bit exact), a down-converted capture (every tone at DC
with its amplitude), then calibrates the baseline phases, injects eight
photon pulses and checks that exactly eight correct records reach memory.
Finally it forces photon-record and capture overflow with stalled memories.
It counts each of these mechanisms and fails if one never occurred.
`tb/dram_model.sv` is the behavioural memory it uses. The full-size run
takes seconds.

## How far to trust it

The arithmetic of each block is checked against independent models, and
the chain is checked end to end at the full size. What has not been done:
synthesis and timing on an FPGA (the 512 MHz target is the reference
design's, not a property shown for this RTL); the eight-read frame store
and the wide per-channel memories would need banking to map well onto block
RAM; the filter-bank bin order is assumed; noise, saturation at full-scale
combs and the matched filter's real coefficients have not been exercised.
