# Station beamforming firmware for a low-frequency aperture array: RTL

A low-frequency aperture-array station is 256 dual-polarisation antennas.
Each antenna is sampled at 800 MS/s with 8 bits. The station must produce a
few beams from these signals, each beam covering 300 MHz of selectable
spectrum. This has to happen in real time, on FPGAs spread over 16 tile
boards of 16 antennas each.

The design does everything in the frequency domain:

* each antenna signal is split into 512 oversampled channels of 781.25 kHz;
* a geometric delay becomes a phase rotation per channel;
* calibration becomes a 2x2 complex matrix per channel, antenna and beam;
* the beam is a sum over antennas, built up hierarchically: 8 antennas inside
  one FPGA, 16 in a tile once the two FPGAs of a board exchange half their
  work, and 256 as a "travelling sum" packet that passes through the tiles of
  the station in a chain.

This repository gives synthesizable SystemVerilog for one FPGA of a tile
board (`tpm_fpga`): the full datapath from the sample-aligned ADC stream to
the SPEAD packets on the network, plus the diagnostic taps. The ADCs, clock
PLL, JESD204B receiver, external DRAM, Ethernet MAC and control bus are
outside the RTL. Their streams appear as plain ports of the top module.

## Signal chain and rates

One FPGA handles 8 antennas x 2 polarisations = 16 signals. Each signal
arrives 4 samples per clock (`LANES = 4`).

```
adc_* -> framer -> cable_delay -> pfb_filter -> 8 x fft_real -> tile_beamformer <-> other FPGA
             |                                      |  |                |
        total_power                      spectrometer  chan_capture      v
                                                                   corner_turner
   net_rx_* -> spead_receiver -> station_beamformer (FIRST/MIDDLE/LAST) <-+
                                        |
                                 spead_formatter -> net_tx_*
```

Everything runs on one clock. A frame is 864 samples, 1080 ns, or 216 input
words. The channelizer emits 1024 points per frame, which is 256 words. The
processing clock must therefore be at least 256/216 times the ADC word rate.
All testbenches present 216 valid input words in every 256 clocks, and every
later block assumes that budget of 256 clocks per frame.

## Framing and time

`framer` waits after `arm` for a rising PPS edge. The first valid word at or
after that edge becomes sample 0 of frame 0. The PPS is given as 4 samples
taken at evenly spaced phases inside one clock. Software picks the phase used
for edge detection, and the phase at which the edge was seen is reported back.
This lets software choose a phase away from the transition, so that boards
sharing a PPS do not disagree by one clock.

Three counters are kept:

* `sync_time`: UTC seconds, loaded by software and advanced by each PPS;
* `start_time`: a copy of `sync_time` taken when framing starts;
* `timestamp`: ns since framing started.

No later stage carries a time with the data. The time of frame `N_f` is
always `t1 + N_f x 1080 ns`, where `t1 = 7560 ns` is the filter preload (7
frames). Packet headers compute their timestamps from this formula.

`cable_delay` delays each antenna by an integer number of samples in
-512..+511. The same delay applies to both polarisations. Every stream goes
through a nominal 512-sample delay, so a negative setting is still causal.
When the wanted sample is in the word arriving in the same clock, the block
bypasses the memory.

## Channelizer

The channelizer is a weighted-overlap-add (WOLA) oversampled polyphase
filterbank, with N = 1024 and hop M = 864. It has 14 blocks, so the prototype
filter has 14336 taps.

**Filter (`pfb_filter`).** Every 864 new samples produce one block of 1024
contiguous samples. The block repeats the last 160 samples of the previous
block at its start. Each further delay stage delays by N samples and repeats
the same 160 samples, so each of the 14 taps sees the right slice of history.

The prototype filter is symmetric. Only its first half (7168 coefficients)
is stored, and the second seven blocks read it mirrored. Block k ≥ 7 reads
`h[(13-k)N + n]` and block k < 7 reads `h[kN + N-1-n]`. Software loads the
coefficients through a write port. One coefficient memory serves all
signals.

Because the hop is not a multiple of N, frame f starts at sample
`T_f = f x 864`, and the FFT input must be rotated by `T_f mod 1024`. The
filter passes this rotation (`out_rot`) to the FFT, which applies it when it
writes its input buffer.

**Real FFT (`fft_real`).** Each instance transforms two real signals,
normally the two polarisations of one antenna. For each signal, pairs of
samples form one complex value, `z[m] = x[2m] + j x[2m+1]`. A 512-point
complex FFT is then taken, and the spectrum is separated as

    X[k] = (Z[k] + Z*[512-k])/2 - j W^k (Z[k] - Z*[512-k])/2,   W = e^{-j2π/1024}

The separation is done while reading out, two channels (2c, 2c+1) per clock
per signal.

The transform is nine radix-2 stages, each computed over the whole array in
one clock. This is simple and exact, but it is large logic. A production
version would use a streaming pipelined FFT in its place.

Outputs are rounded by 2^-(FFT_SHIFT+1) and saturated to 18 bits. A
per-channel overflow flag reports saturation. The latency from the last input
word of a frame to the first output word is 12 clocks.

## Tile beamformer: the arithmetic

Sixteen sub-bands select the spectrum. Each sub-band has an even start
channel, a width that is a multiple of 8 channels, and a beam number from 0
to 7. Concatenated, the sub-bands give a list of up to 384 (channel, beam)
entries. The same channels may appear in several sub-bands, for example
once per beam.

For each entry and antenna, the block computes the following, in this order
and with these roundings. All roundings are round-half-up with saturation.

1. **Exponent.** Each antenna and group of 8 channels has a 3-bit exponent.
   The 18-bit channel sample is scaled by 2^exp and rounded to 12 bits:
   `x12 = sat12(round(x18 * 2^exp / 2^7))`.
2. **Delay phase.** The delay `d` is in units of Ts/8192 = 152.6 fs and
   spans ±80 ns in 20 bits. The phase is `φ = (ch * d) >> 11`, in 4096
   steps per turn. This is exact: `781.25 kHz x 152.6 fs x 4096 = 2^-11`.
   The sample is multiplied by `cos φ + j sin φ`, with 16-bit values from a
   quarter-wave table, and rounded to 12 bits.
3. **Calibration.** The sample is multiplied by the 2x2 complex matrix
   (hh, hv, vh, vv), which has 16+16 bit mantissas with unity at 2^14. The
   result is rounded to 8 bits.
4. **Sum.** The 8-bit results are summed over the antennas in 16 bits.

The delay follows `d = tau0 + t * rate`. It is held in an accumulator with
14 fraction bits, to which the 22-bit rate is added every 1024 frames. This
gives a rate step of 152.6 fs / 2^14 per 1.106 ms, about 8.4 fs/s.

Delays and calibration are written into shadow registers while the beamformer
runs. They take effect at a programmed frame number, so the change is
synchronous across boards and never interrupts the data. The delay is
applied at frame `dly_apply_frame`, and the calibration banks swap at
`cal_swap_frame`.

**Sharing between the two FPGAs.** A channelized frame is stored whole, and
then processed two entries per clock (192 clocks for 384 entries). Of each
pair, FPGA 0 keeps the even entry and sends the odd one to its partner;
FPGA 1 does the reverse. Kept entries wait in a FIFO. When the partner's
partial sum for an entry arrives, the two sums are added. Each FPGA then
holds the 16-antenna tile beam for 192 entries, half of the selected
bandwidth. The partner's input is registered once on entry, so any link
latency from 0 clocks up to the FIFO depth is tolerated.

## Corner turn and the station chain

The tile beam comes out as frames of one time sample for all entries. The
station chain and the correlator want the opposite: many consecutive time
samples of a few channels.

`corner_turner` stores blocks of 2048 time samples x 192 entries in a double
buffer. While one block is being written, the previous one is read out.
Reading goes group by group (8 entries per group), and for each group the
whole block is read as 16 frames of 128 samples x 8 channels. Within a frame
the order is time-major with channels inside. Each sample carries both
polarisations as 16+16 bits, 64 bits in all. Sixteen idle clocks follow each
frame; they leave the packet formatter room to insert its header words.

`station_beamformer` is one link of the chain. Its mode is set at run time:

* **FIRST** sends its local frames on.
* **MIDDLE** adds its local frame, sample by sample with 16-bit saturation,
  to each travelling frame that arrives from the previous board, and sends
  the sum on. Local frames wait in a FIFO until their travelling partner
  arrives; both streams carry frames in the same order.
* **LAST** adds as MIDDLE does, but keeps the sum. It collects 16
  consecutive frames of one group (2048 samples), requantises them to 8+8
  bits, and emits 8 CSP frames, one per channel, each of 2048 samples. Each
  64-bit word holds 2 time samples. The bytes, from byte 0 up, are
  H.im[t], H.re[t], V.im[t], V.re[t], then the same four for t+1.

## Packets

`spead_formatter` wraps each frame in a SPEAD-64-48 packet with a 72-byte
header of 9 words:

| word | item | content |
|---|---|---|
| 0 | magic | `0x53 04 02 06 0000 0008` (version 4, 16-bit IDs, 48-bit addresses, 8 items) |
| 1 | 0x0001 heap counter | logical channel (16) and packet counter (32) |
| 2 | 0x0004 packet length | payload bytes |
| 3 | 0x1027 reference time | `start_time` |
| 4 | 0x1600 timestamp | ns of the first sample, `7560 + first frame x 1080` |
| 5 | 0x1011 centre frequency | physical channel x 781250 Hz |
| 6 | 0x3000 CSP channel info | beam, physical channel |
| 7 | 0x3001 CSP antenna info | sub-array, station, number of antennas |
| 8 | 0x3300 sample vector | absolute item, payload offset 0 |

Items with bit 63 set are immediate: the value is in the header word itself.
Header fields come from a 32-bit side channel (`tuser`) and from dedicated
inputs, and they are queued in a header FIFO. A payload FIFO holds the data
meanwhile, and a small controller emits the header and then the payload.
Back-pressure from the output is honoured.

`spead_receiver` reverses this. It recognises items by ID, so their order
does not matter. It rebuilds the side channel and the header outputs and
holds them for the payload. A packet with a wrong magic word raises
`hdr_error` and is dropped. In the top, the receiver feeds travelling frames
into the station link.

`dest_lut` is the destination table for the network output. It has 256
entries, indexed by the 8-bit stream identifier (tID), and each entry holds
a MAC address, an IPv4 address and a UDP port. Control software fills the
table. In the top, one stream identifier register selects the entry. The
looked-up fields are presented on `net_tx_dst_*` for the UDP MAC. The
identifier is how a board points its output at the next tile of the chain,
at the beamformer back-end or at the calibration system.

## Diagnostics

* `total_power` sums the squares of the raw samples of every signal over a
  programmable number of frames.
* `spectrometer` accumulates `X_a[k] * conj(X_b[k])` per channel for two
  selected signals (a = b gives a power spectrum). The accumulators are
  48-bit and the readout is 32-bit saturated.
* `chan_capture` takes one selected channel of all 16 signals for 128
  frames. It rounds each sample to 8+8 bits and streams the block as 512
  words of 4 samples, with the channel number on `tuser`.

## Register map of `tpm_fpga`

`cfg_addr[31:28]` selects the region:

| region | register |
|---|---|
| 0 | framer: sync time, arm, PPS phase |
| 1 | cable delay per antenna |
| 2 | power integration length |
| 3 | filter coefficients |
| 4 | sub-bands |
| 5 | exponents |
| 6 | delay shadow |
| 7 | delay apply frame |
| 8 | calibration shadow |
| 9 | calibration swap frame |
| 10 | station mode and header IDs |
| 11 | capture channel and spectrometer setup |
| 12 | destination table entries (IP and port staged, then MAC) |
| 13 | stream identifier of the output stream |

The header comment of `rtl/tpm_fpga.sv` gives the bit fields.

## Where this RTL departs from the original firmware

* **Corner-turn memory.** The original keeps up to about 0.23 s of partial
  beams in external DRAM. Here the block is an on-chip array of 2048 time
  samples (2.2 ms), the shortest block that still yields the 2048-sample CSP
  frames. The default is about 50 Mbit; a real FPGA would need the DRAM.
* **FFT structure.** The FFT is a whole-array, one-stage-per-clock
  transform, not a streaming pipeline. The arithmetic and scaling are
  defined, but the area is not representative.
* **Clocks and widths.** There is one clock and one 64-bit stream width.
  The FIFOs of the formatter and receiver do not cross clock domains or
  change width.
* **Packet types.** Only the CSP header type is generated. The formatter
  payload buffer is 256 words deep in the top.
* **Station links.** Each FPGA drives its own station-chain port, rather
  than the second FPGA merging into the first one's link.
* **Travelling frames.** These are 128 samples x 8 channels. One passage of
  the original description speaks of 256-sample groups for the travelling
  packets; this design follows the 128-sample frame layout given elsewhere.
* **Numeric choices made here.** The following were chosen in this design,
  not taken from the original:
  * the requantisation shifts: FFT_SHIFT, the exponent origin, CSP_SHIFT,
    the capture shift and OUT_SHIFT;
  * saturating sums;
  * the 16-clock gap between frames;
  * the FIFO alignment schemes;
  * the register map.
* **FFT overflow in the full chain.** With 8-bit input and the default
  filter scaling, the FFT overflow flags cannot fire. The FFT is tested for
  them on its own.

## Verification

Each block has a self-checking testbench in `tb/` that compares the block
against a reference model written independently in the testbench:

* `tb_pfb_filter` runs random symmetric filters and checks the
  frame-repeat/rotation arithmetic and the 4-clock latency.
* `tb_fft_real` checks against a direct DFT with rotations, including an
  overflowing tone.
* `tb_tile_beamformer` uses two instances wired as a tile. It checks every
  entry against Eq. 1 with the rounding rules above, the rate accumulation,
  and two calibration bank swaps.
* `tb_corner_turner` and `tb_station_beamformer` check the sample order and
  framing. The station test runs a FIRST → MIDDLE → LAST chain with
  saturation.
* `tb_spead_formatter` and `tb_spead_receiver` check every header word under
  back-pressure. The receiver test shuffles the item order and includes a bad
  packet.
* `tb_dest_lut` fills the destination table and reads every entry back in
  random order, including an entry in the clock after it was rewritten.
* `tb_tpm_fpga` runs a two-FPGA tile at reduced size (2 antennas per FPGA,
  2 filter blocks, 32 entries, 256-frame blocks). FPGA 0 is FIRST and
  FPGA 1 is LAST. The test counts every mechanism along the chain and checks
  packet headers and the travelling payload.
* `tb_tpm_fpga_full` runs one FPGA at full size through a complete
  2048-frame corner-turn cycle: 384 travelling packets, about 1 M clocks,
  under a minute with Verilator.

To simulate, run from the repository root (the sine table is read by the
relative path `rtl/sin_quarter.hex`) and give the package first:

```
verilator --binary --timing -Wno-fatal --top-module tb_tile_beamformer \
          rtl/lfaa_pkg.sv $(ls rtl/*.sv | grep -v lfaa_pkg) tb/tb_tile_beamformer.sv
./obj_dir/Vtb_tile_beamformer
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.
`rtl/sin_quarter.hex` holds `round(32767 sin(2πi/4096))` for i = 0..1024, a
quarter wave with both end points. `fft_real` and `tile_beamformer` read it
for their twiddle factors and rotations; `sincos_rom` is the same table as a
stand-alone 12-bit-phase sine/cosine helper.
