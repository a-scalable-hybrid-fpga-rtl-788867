# F-engine RTL for a hybrid FPGA/GPU FX correlator

A radio interferometer has to correlate every antenna signal with every
other one. An FX correlator does this in two steps. First each signal becomes
a spectrum (the F stage, one Fourier transform per input, cost O(N)). Then,
for every frequency channel, the spectra of all input pairs are multiplied
and averaged (the X stage, an outer product, cost O(N²)). The hybrid
correlator described by Kocz et al., "A Scalable Hybrid FPGA/GPU FX
Correlator", puts the two steps on different hardware:

* FPGA boards run the F stage. Each board digitises a few inputs,
  channelises them, cuts every channel to 4+4 bits, and sends selected
  sub-bands out as Ethernet packets.
* An ordinary Layer-2 switch carries each sub-band from every board to the
  server that handles it. The switch thus does the first half of the "corner
  turn": data ordered by input become data ordered by frequency.
* CPU threads on each server capture the packets, widen the samples to 8 bits
  and finish the reordering. GPUs then do the cross-multiplication and the
  time averaging.

Only the FPGA side is hardware that one designs, and this repository holds
SystemVerilog for it: one F-engine board, from ADC samples to Ethernet
frames. The capture, unpack and GPU stages are software on commodity servers
and are not part of the RTL.

What makes the scheme scale is the packet. Every packet carries a 64-bit
sequence number and a 64-bit identifier of the F-engine that sent it. All
boards start on the same pulse-per-second (PPS) edge, so the sequence number
also works as a timestamp. A receiver can therefore put any packet at its
place in memory, whatever order packets arrive in. Adding inputs means adding
boards and switch ports; adding bandwidth or compute means adding servers.

## Data path

```
 adc[0..NA-1] (8-bit, one sample per clock each)
   │
   ├─ pfb_fir ─ fft_r2sdf ─ requant ──┐   one chain per input, in lock step
   ├─ pfb_fir ─ fft_r2sdf ─ requant ──┤
   ⋮                                   ▼
                                  chan_select         NA bytes packed per channel,
                                       │               tagged with the ports that want it
                 ┌─────────────────────┼──────────────────────┐
            spec_buffer           spec_buffer      …      spec_buffer    one per port
                 │                     │                      │
            pkt_framer            pkt_framer       …      pkt_framer
                 │                     │                      │
            tx stream 0           tx stream 1            tx stream NPORT-1  → 10 GbE cores
 pps, arm ─ pps_sync ─ sync / running to everything above
```

| file | role |
|---|---|
| `rtl/fx_pkg.sv` | shared sizes, header struct, 4+4-bit sample type |
| `rtl/pps_sync.sv` | arm-then-PPS start; clears all counters at once |
| `rtl/pfb_fir.sv` | polyphase FIR front end of the filter bank |
| `rtl/fft_r2sdf.sv`, `rtl/fft_sdf_stage.sv` | streaming FFT, one sample per clock |
| `rtl/requant.sv` | per-channel gain and 4-bit requantisation |
| `rtl/chan_select.sv` | packs inputs per channel, selects each port's sub-band |
| `rtl/spec_buffer.sv` | double packet buffer; gathers Nt spectra, restores channel order |
| `rtl/pkt_framer.sv` | 16-byte header plus data onto a 64-bit valid/ready stream |
| `rtl/fengine_top.sv` | one board: all of the above wired together |

The default parameters are those of the 32-input field system: four boards,
each with eight 8-bit inputs sampled at 200 MS/s, a 2-tap 8192-point
filter bank (4096 channels of 24.4 kHz) and 4+4-bit output samples.

| parameter | default | where it comes from |
|---|---|---|
| `NA` inputs per board | 8 | field system |
| `NFFT` filter bank points | 8192 | field system |
| `TAPS` filter bank taps | 2 | field system |
| ADC bits | 8 | field system |
| `DW` bits per component after the FFT | 18 | 36-bit complex, field system |
| bits per component on the wire | 4 | field system |
| `NPORT` Ethernet ports | 4 | this design (ROACH-class boards carry several 10 GbE ports) |
| `BUFW` words per packet bank | 1024 (8 kB) | this design |
| `NT_MAX` spectra per packet | 16 | this design |
| gain format | 16-bit unsigned, 8 fraction bits | this design |

## The channeliser

### Polyphase FIR (`pfb_fir`)

A plain FFT of NFFT samples leaks strong signals into many channels. A
polyphase filter bank first runs a FIR filter TAPS·NFFT samples long, then
folds it into NFFT outputs per frame: sample *i* of the current frame leaves
as

    y[i] = Σ_{t=0}^{TAPS-1} h[(TAPS-1-t)·NFFT + i] · x[frame − t][i]

The delay line is TAPS−1 circular memories, each NFFT samples deep, all
addressed by the position *i* in the frame. The prototype filter *h* is a
Hamming-windowed sinc with its main lobe one channel wide. It is computed into
one ROM per tap when the design starts, 18-bit signed with the peak at
2¹⁷−1. The sum is rounded and shifted so that a full-scale 8-bit input
reaches half of the 18-bit range, leaving one bit of headroom; the rest
saturates. For the first TAPS−1 frames after the start the delay line holds
stale data, and `out_valid` stays low.

The window is this design's choice. The source says only that the filter
bank has 2 taps and 8192 points.

### Streaming FFT (`fft_r2sdf`, `fft_sdf_stage`)

This is the part that takes the most thought to read. The FFT must keep up
with one new sample per clock per input, forever. It is built as a
single-path delay-feedback (SDF) pipeline: log₂ NFFT radix-2 stages in a row.
Stage *s* has a span D = NFFT/2^(s+1), so 4096, 2048, … 1 for the default
size. Each stage owns a D-word feedback memory and a D-entry twiddle ROM and
alternates between two phases of D samples each:

1. **fill**: the incoming sample goes into the memory. Out goes what the
   memory held, which is the previous block's twiddled differences.
2. **butterfly**: with *a* from the memory and the incoming *b*, out goes
   *a+b*, and *(a−b)·W^j* goes into the memory. Here *j* is the position in
   the half-block and W = e^(−iπ/D).

Every stage thus delays the stream by D samples plus one output register.
The first result of a frame therefore leaves NFFT−1+log₂ NFFT clocks after
its first sample, and results leave in bit-reversed order. `out_bin` is the
bit reversal of an output counter, so every result carries its natural bin
number and nothing is reordered here. The input is real, so the upper half
of the bins mirrors the lower half. With `HALF=1` only bins 0…NFFT/2−1 are
flagged valid; in bit-reversed order they are every other output.
`out_last` marks bin NFFT/2−1, the last valid bin of a frame.

Word growth is handled the CASPER way. Bit *s* of the `fft_shift` register
makes stage *s* halve its butterfly outputs, with rounding. With every bit
set the FFT computes the DFT divided by NFFT. After each butterfly and each
rotation the result saturates at 18 bits. The rotation at *j*=0 is exactly 1
and skips the multiplier.

Note the pipeline only moves when samples come in. The last frame before the
ADC stream stops stays inside the feedback memories until the next frame
pushes it out.

The source uses a library FFT and does not describe its structure; the SDF
pipeline is simply the smallest real-time architecture for one sample per
clock.

### Equalisation and requantisation (`requant`)

Each channel of each input has its own 16-bit gain (8 fraction bits, 1.0
after start-up), written by the host through `gain_we`, `gain_input`,
`gain_chan` and `gain_val`. A channel of a noise-like signal carries little
information beyond its top few bits. So the product `x·g` is rounded to
`x·g / 2^(8+18−4)` and clipped to −7…+7 for both real and imaginary parts,
giving 8 bits per complex sample. The clip range is symmetric, so −8 never
occurs. Clipped samples are counted in `sat_count`. The gains flatten the
bandpass so that every channel fills the 4-bit range about equally.

## Sub-bands and the packet

All input chains run in lock step, so at every clock all NA inputs present
the same channel. `chan_select` packs the NA bytes of that channel into one
NA·8-bit word (64 bits for 8 inputs), input 1 in the most significant byte.
It then checks the channel against each port's band `[ch_lo, ch_hi)`.
Channels in no band are dropped. This is where the network load drops:
only the interference-free part of the band leaves the board.

Each port sends packets of this form (64-bit words, word 0 first on the wire):

| word | content |
|---|---|
| 0 | sequence number |
| 1 | identifier: F-engine id (`fid`) in bits 15:0, bits 63:16 zero (reserved) |
| 2 … | data: for time sample 0 the channels `ch_lo … ch_hi−1`, one word each; then time sample 1, and so on up to Nt−1 |

Within a data word, byte *k* from the top is input *k*+1. Each byte is the
real part in bits 7:4 and the imaginary part in bits 3:0, both two's
complement. A packet has Nt·(ch_hi−ch_lo) data words, that is
Nt·NA·(ch_hi−ch_lo) bytes. `tx_eof` marks the last word.

The stream is 64 bits wide with `tx_valid`/`tx_ready`. A word moves when
both are high and stays put while `tx_ready` is low; `pkt_framer` carries an
assertion for that rule. MAC and PHY framing, destination address and UDP
port belong to the 10 GbE core that takes this stream and are not part of
this design.

## Buffering, sequence numbers and lost packets

With many inputs, each server handles only a few channels, and one spectrum's
worth of a sub-band would make a tiny packet. `spec_buffer` therefore
gathers `nt` consecutive spectra (1 to 16) into one packet. That keeps
packets large and the per-packet overhead small.

Each port has two banks of `BUFW` words. The write side stores channel *c*
of spectrum *t* at address `t·nch + (c − ch_lo)`. This puts the FFT's
bit-reversed order back into ascending channel order, with each time sample
after the previous one. After `nt` end-of-spectrum marks the bank is
complete:

* if the framer has released the other bank, the banks swap and the packet
  goes out with the current sequence number;
* if not (the Ethernet side has stalled too long), the packet is dropped and
  counted in `ovf_count`.

Either way the sequence number advances. It counts packet slots since the
PPS start, not packets sent. So packet *k* of any board always holds spectra
*k·nt … k·nt+nt−1* counted from the common start, and a receiver sees a drop
as a gap. The drop policy and the two-bank scheme are this design's choices.
The source asks for a sequence number that increases with each packet and
says that the receiver records missing packets as lost.

Configuration rules: `nt·(ch_hi−ch_lo) ≤ BUFW` for every port, checked by an
assertion. `ch_hi ≤ NFFT/2`. A port with an empty band (`ch_lo == ch_hi`) is
off and sends nothing. Change configuration only while the engine is stopped.

Rate check at the defaults: a frame of 8192 clocks brings at most 4096
channels. At one word per clock a port sends a 1024-word packet in 1026
clocks. So a port only backs up when its 10 GbE core holds `tx_ready` low.

## Starting on the PPS

`pps_sync` synchronises the PPS input with two flops. After the host pulses
`arm`, the first rising edge makes a one-clock `sync`, three clocks after the
edge. `sync` clears the frame counters of every filter bank and FFT, the
packet counters and the status counters, and `running` lets ADC samples in
from the next clock. With TAPS=2 the first frame only fills the delay line;
spectrum 0 is computed from frames 0 and 1. Its channels leave the FFT during
frame 2, and its packet starts after spectrum nt−1 is complete. Re-arming
restarts the engine on the next PPS edge.

## Using and changing the RTL

Every file starts with a comment on what the module does, its interface and
its timing. Build and run a testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/fx_pkg.sv tb/tb_fengine_top.sv \
          -y rtl --top tb_fengine_top && ./obj_dir/Vtb_fengine_top
```

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
through a watchdog if something hangs.

| testbench | what it checks |
|---|---|
| `tb_pps_sync` | no start without arming, one sync per arming, 3-clock latency, restart |
| `tb_pfb_fir` | 16-point 3-tap filter against the windowed-sinc formula, bit-exact; gating; 1-clock latency |
| `tb_fft_r2sdf` | 64-point FFT against a floating-point DFT within 4 LSB; bin numbering; latency NFFT−1+log₂NFFT; half-band mode |
| `tb_requant` | gains, rounding, clipping and flags bit-exact; 2-clock latency |
| `tb_chan_select` | packing order, overlapping bands, drops, end marks |
| `tb_spec_buffer` | channel reordering, Nt=3 packing, sequence numbers, overflow drop with a sequence gap |
| `tb_pkt_framer` | header, data order, eof, random backpressure, len+2 clocks per packet |
| `tb_fengine_top` | whole board at 4 inputs / 64 points / 2 ports, Nt=2. Every output byte is compared with a reference computed in the testbench (exact for ≥90% of bytes, within one 4-bit step for the rest). It forces and counts a PPS start, multi-spectrum packets, channel drops, backpressure, an overflow with its sequence gap, and clipping. |
| `tb_system32` | the 32-input system in miniature: four boards of 8 inputs (64 points, 2 ports) on one PPS, armed at different times and drained at different, changing rates. A receiver model in the testbench places packets by (sequence number, F-engine id), unpacks them into 32-input vectors per channel (input = board·8 + local input) and cross-multiplies them. Checks: every sample against the reference, every slot complete from all boards, no drops, packets of one slot arriving out of board order, all 496 pairs correlated in the channels of a tone common to all inputs and none in a noise-only channel. |
| `tb_fengine_full` | whole board at the default size (8 inputs, 8192 points, 4 ports of 615 channels, a 60 MHz band). Three spectra; every byte checked the same way; one port stalled into an overflow. Runs in well under a minute. |

The top's reference model is the spec itself, computed independently: the
windowed-sinc sum, then a floating-point DFT, then gain, rounding and clip.
A one-step difference is allowed where the fixed-point FFT's rounding falls
on the other side of a 4-bit rounding boundary.

The ROM tables (PFB window, twiddles) are filled by `initial` loops with
`$sin`/`$cos`. Simulators and FPGA flows that evaluate such loops turn them
into initialised memories. A flow that does not would need the tables
computed offline by the same formulas (given in the file headers).

## Departures from the source and open points

* The internals of the filter bank, FFT, requantiser and 10 GbE interface
  are not described in the source, which builds them from the CASPER
  library. Everything under "The channeliser" except the sizes is this
  design's own: window, FFT architecture, word widths inside the FFT, shift
  schedule, gain format, rounding and clipping.
* The packet figure lists the last channel as Ch_f but gives the data size
  as N_t·N_a·(Ch_f−Ch_s) bytes. Here the upper bound is exclusive, which
  matches the byte count.
* The identifier layout, the byte and nibble order, the per-port sub-bands,
  the four ports, the 8 kB bank and Nt ≤ 16 are choices. The source gives
  neither a packet size nor Nt for the field system.
* Buffering is in on-chip RAM only. The source mentions external QDR or DRAM
  for large buffers; that alternative is not built.
* The ADCs, the 10 GbE MAC/PHY, the host register bus and the off-board
  stages (switch, capture, unpacker, GPU correlator) are outside the RTL.
  Their signals are plain ports of `fengine_top`.
* Clock-domain crossing between the ADC and Ethernet clocks is not modelled:
  the whole board runs on one clock, as in the field system where ADC and
  FPGA both run at 200 MHz.

## Sizing against the published systems

* **32 inputs** (four boards of eight inputs, 1628 channels ≈ 40 MHz): the
  band is split over two ports of 814 channels, each packet
  814·8 = 6512 data bytes, below the 8192-byte bank. Per board this is
  1628·8 bytes per 40.96 µs ≈ 2.5 Gb/s, and the four boards together make
  the ≈10 Gb/s the server captured.
* **64 and 512 inputs, ≈60 MHz**: with eight-input boards that is 8 or 64
  boards. Each sends about 2458 channels (60 MHz / 24.4 kHz, assuming the
  same filter bank), for example as four 615-channel packets of 4920 bytes.
  This is the configuration `tb_fengine_full` runs.
* **5600 and 19000 inputs** (projections): each board's load is unchanged.
  What grows is the number of boards and the number of destinations. Sending
  successive packets of one channel to different GPUs (time multiplexing) is
  a matter of the 10 GbE core's destination addressing, which is outside this
  design.
