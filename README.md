# Frequency-multiplexed KID readout gateware for an RFSoC

Kinetic inductance detectors (KIDs) are superconducting resonators. Each
detector on a readout line responds at its own frequency, so one coaxial line
can serve about a thousand of them. The readout sends a comb of probe tones
down the line, one tone per resonator, digitises what comes back, and tracks
the amplitude and phase of every tone. A detector that absorbs light shifts
its resonance, and that shift shows up as a change in the complex
transmission (I/Q) of its tone.

This repository holds synthesizable SystemVerilog for the programmable-logic
part of such a readout on a Xilinx RFSoC, organised as four independent
channels ("DSP chains"). Each chain serves one RF network of up to 1024 tones
in 512 MHz of complex baseband and streams its results as UDP packets on its
own 1 Gb/s Ethernet port. The RF data converters with their digital mixers,
the DDR4 memory, the processor, the AXI interconnect and the Ethernet PHYs
are vendor parts. They sit outside the RTL, and the top level brings their
signals out as ports.

## One chain at a glance

```
             processor (AXI4-Lite) --> axil_regs --+--------------+---------------+
                                                   |              |               |
  comb_lut  --4 samples/clk-->  D/A               comb          bin table      beat table
                                                   |              |               |
  A/D --4 samples/clk--> pfb_fir --> fft_par4 --> bin_select --> ddc <-- beat_lut
                         (pfb: 1024-channel polyphase           |
                          filterbank, 500 kHz bins)             v
                                                          vector_accum (nacc)
                                                                |
                     timing_counters ---- time stamp ----> cdc_buffer  (clk -> eclk)
                                                                |
                                                          udp_packetizer --> GMII
```

The chain demodulates in two stages:

1. **Coarse channelization.** A 1024-channel polyphase filterbank (PFB)
   splits the 512 MS/s complex stream into 1024 bins of 500 kHz. One frame of
   1024 bins comes out every 1024 samples, i.e. every 2 us.
2. **Fine channelization.** For every tone, the bin that holds it is picked
   out (*bin selection*). Then the bin is multiplied by a stored phasor that
   removes the tone's offset from the bin centre (*DDC*, using the
   *beat-frequency table*). Finally the results are summed over `nacc` frames
   (*vector accumulation*). At `nacc = 1024` each tone yields one I/Q point
   every 2.05 ms (488 Hz), and that point is the average of 2^20 input
   samples.

The comb fed to the D/A comes from a 2^20-sample table that the processor
fills with the sum of all probe tones. At 512 MS/s, 2^20 samples give a
frequency grid of 488 Hz. A comb built on that grid repeats exactly after
2^20 samples, so playing the table in a loop has no phase jump at the wrap.
The same period of 2^20 samples is 1024 filterbank frames. That is why the
beat table needs only 1024 frames per tone: the offset phasor of every tone
repeats with the comb.

## Data format and clocks

Everything moves four complex samples per clock (`LANES = 4`), the width of
one comb-memory word. At 512 MS/s that is a 128 MHz fabric clock, `clk`. The
Ethernet side runs on the 125 MHz GMII transmit clock, `eclk`.

| signal | format | package type |
|---|---|---|
| converter samples | 16-bit signed I and Q | `samp_t` |
| bins (PFB, bin selection, DDC) | 24-bit signed I and Q, 8 fraction bits more than the samples | `bin_t` |
| beat phasors | Q1.15 I and Q | `beat_t` |
| accumulated values | 32-bit signed I and Q, saturating | `acc_t` |
| twiddles and filter taps | Q1.16, 18 bits | — |

Inside a frame, the tone slots travel as *words*. Word `q` (0..255) carries
tone slots `4q .. 4q+3`, with slot `4q+r` on lane `r`. Every block after the
FFT uses this order, and each block passes along `sof` (first word of a
frame) and `q`.

The shared package `readout_pkg` holds these types, the widths, and constant
functions. The functions compute twiddles with `$cos`/`$sin`, do bit
reversal, and do rounding and saturation. All constant tables (twiddles,
filter taps, IP header checksum) are computed at elaboration, so no data
files are needed.

## The four-lane FFT (`fft_par4`, `r2sdf_stage`)

The FFT is the least obvious block. It must take four samples per clock and
produce four bins per clock. With `N = 4·M` (`M = 256`), the input sample
`n = 4m + l` arrives on lane `l` at clock `m`. Split the DFT by lane:

```
X[k] = sum_l W_N^(l·k) · sum_m x[4m+l] · W_M^(m·k)        (W_N = e^{-j2pi/N})
     = sum_l W_N^(l·k) · Y_l[k mod M]
```

- Each lane runs its own 256-point radix-2 single-delay-feedback (R2SDF)
  pipeline. There are eight `r2sdf_stage` instances per lane, with delays
  128, 64, ..., 1. The pipeline computes `Y_l[k']` and emits it in
  bit-reversed `k'` order.
- For each `k'` the four lanes hold `Y_0..Y_3[k']` at the same moment. The
  four bins `k = k' + 256·p` (p = 0..3) are then
  `X[k'+256p] = sum_l (W_N^(l·k') Y_l[k']) · (-j)^(l·p)`.
  This is one twiddle multiply per lane followed by a 4-point DFT
  (a radix-4 butterfly) across the lanes.
- Each radix-2 stage scales by 1/2 with rounding and the radix-4 step by 1/4,
  so the whole transform is scaled by 1/N and cannot overflow.
- The outputs `out_bins[p]` carry bin `out_kp + 256·p`. `out_kp` runs in
  bit-reversed order. `out_frame_ok` masks the start-up frames that the
  pipelines have not yet filled.

The latency from the last sample of a frame to its first bin is
`N/4 + log2(N/4) + 2` clocks.

In front of the FFT, `pfb_fir` turns the FFT into a polyphase filterbank.
Branch `p` of frame `f` is a 4-tap FIR over the same branch of the last four
frames. The prototype filter is a sinc of width N times a Hann window over
4·N points. The block keeps three frame delays per lane in memories of 256
words. The filter flattens each bin's passband and lowers its side lobes
compared with a plain FFT.

## Bin selection

About half the resonators on a typical array sit closer together than one
500 kHz bin, so one bin often has to feed several tones. `bin_select` stores
a whole frame and then reads it out in tone order:

- **Write.** The four bins of each FFT clock (`k', k'+256, k'+512, k'+768`)
  go to four banks at address `k'`. The banks are double-buffered: one page
  fills while the other is read.
- **Read.** Slot `4q+r` is read on lane `r` at read clock `q`. Each lane must
  fetch an arbitrary bin every clock, so each lane has its own copy of the
  four banks (16 memories of 512 words). The processor writes a 1024-entry
  table, one bin number per tone slot, and any bin may appear in any number
  of slots.
- **Timing.** Reading a frame starts one clock after its last bin is written
  and takes 256 clocks. The read therefore ends before the next frame
  completes.
- **Frame count.** `out_frame` counts the frames read. It drives the beat
  table lookup.

## Beat table and DDC

A tone at `f_bin + δ` leaves a residual rotation of `e^{+j2πδt}` in its bin
from frame to frame. If the bin were accumulated as it is, that rotation
would average the tone away. `beat_lut` therefore stores
`e^{-j2πδ·frame}` for every tone slot and every frame of the comb period:
1024 frames × 1024 slots per chain, Q1.15. It is read with
`out_frame mod 1024` and the slot word `q`, and the answer arrives one clock
later.

`ddc` multiplies each selected bin by its phasor, four complex multiplies per
clock. It rounds the product back by 2^15 and saturates it to 24 bits. The
phasors the software writes can also absorb the fixed delay between D/A and
A/D, a per-tone phase, and a gain.

## Vector accumulation and the `nacc` switch

`vector_accum` keeps a 32-bit I/Q sum for each of the 1024 slots. The sums
are stored as four lane memories of 256 words. In the first frame of an
accumulation the input overwrites the stored sum. In the last frame, sum plus
input goes straight to the output (four tones per clock, same word order)
instead of back to memory. No frame is lost between vectors.

`nacc` (16 bits, reset value 1024, 0 acts as 1) can be changed at any time.
The block reads it only at the first frame of an accumulation, so every
vector is the sum of exactly the `nacc` in force when it began. This is the
"change the detector bandwidth on the fly" mode switch. The sums saturate
instead of wrapping.

## Crossing to the Ethernet clock and the packet format

`cdc_buffer` is a two-page dual-clock memory. The accumulator writes a
vector into one page on `clk`. Writing the last word flips a toggle. The
toggle reaches `eclk` through a two-flop synchroniser, and the page and its
time stamp are read only after that. There is no back-pressure, because UDP
has none. A vector that completes while the packetizer still holds the other
page is dropped and counted (`DROPPED` register). One full packet takes
about 66 us on the wire and a vector arrives every `nacc × 2 us`, so no
vector is lost for `nacc ≥ 64`.

`udp_packetizer` sends one Ethernet/IPv4/UDP frame per vector on a byte-wide
GMII port:

| bytes | content |
|---|---|
| 8 | preamble and start delimiter |
| 14 | destination MAC, source MAC, type 0x0800 |
| 20 | IPv4 header (checksum computed at elaboration) |
| 8 | UDP header, checksum 0 |
| 4 | packet counter |
| 4 | sync pulse count |
| 8 | time stamp of the vector (fabric clocks) |
| 8 | time stamp of the last sync pulse |
| 8·N | for tone 0..N-1: I, then Q, 32-bit each |
| 4 | Ethernet CRC-32 |

All fields are big-endian except the CRC. With N = 1024 the frame is 8262
bytes, a jumbo frame, and the receiving network must accept it. After each
frame the transmitter holds a 12-byte inter-frame gap. The addresses and
ports are parameters.

`timing_counters` provides the time stamps, shared by all four chains. It
has a 64-bit free-running counter of fabric clocks. It also takes the sync
input (for example a GPS pulse per second, digitised off-chip), passes it
through a synchroniser, counts its rising edges, and records the counter
value at the last edge.

## Diagnostic snapshots

Four points of each chain can be captured for inspection:

| tap | signal |
|---|---|
| 0 | the A/D samples entering the filterbank |
| 1 | the filterbank bins, in FFT output order: word `q` holds bins `k' + 256·m` with `k'` the bit-reversed `q` |
| 2 | the DDC output |
| 3 | the accumulated vectors |

Software writes the tap number and an arm bit to `SNAP_CTRL`. `snapshot`
then waits for the next frame start on that tap and stores the next 1024
values, sign-extended to 32-bit I/Q. When the buffer is full, `SNAP_STAT`
reads 1, and the values can be read through the register window.

## Processor interface

Each chain has an AXI4-Lite slave (`axil_regs`) with a 24-bit byte address.
Writes need AWVALID and WVALID together. There is one outstanding response
per direction, and responses are always OKAY.

| `addr[23:22]` | region | contents |
|---|---|---|
| 0 | registers (`addr[4:2]`, `addr[15]` = 0) | 0 `NACC` rw, 1 `CONTROL` rw (bit 0: play comb), 2 `DROPPED` ro, 3 `PKT_COUNT` ro, 4 `VEC_COUNT` ro, 5 ID = 0x4B494430, 6 `SNAP_CTRL` (bits 2:1 tap, write 1 to bit 0 to arm), 7 `SNAP_STAT` (bit 0 done) |
| 0 | snapshot window (`addr[15]` = 1) | value `addr[12:3]`; `addr[2]` = 0 gives I, 1 gives Q |
| 1 | comb table | sample `addr[21:2]`, data `{I[31:16], Q[15:0]}` |
| 2 | beat table | entry `addr[21:2] = frame·1024 + slot`, data `{I, Q}` Q1.15 |
| 3 | tone-to-bin table | slot `addr[11:2]`, bin number in `[9:0]` |

The tables are write-only and read back as 0. `DROPPED` and `PKT_COUNT`
belong to the Ethernet clock domain and are sampled without a synchroniser,
so read them twice if an exact value matters. To set up a chain, software:

1. writes the comb;
2. writes the bin table (bins 512..1023 are the negative frequencies);
3. writes the beat table;
4. sets `NACC`;
5. sets `CONTROL` bit 0.

## Top level

`readout_top` holds four `dsp_chain`s and one `timing_counters`. Element `c`
of each per-chain port array belongs to chain `c`:

- converter words `adc_*` and `dac_*`;
- AXI4-Lite `s_*`;
- GMII `txd` and `tx_en`.

The parameter defaults are the full design:

| parameter | default |
|---|---|
| `NCHAIN` | 4 |
| `N` | 1024 |
| `TAPS` | 4 |
| `COMB_DEPTH` | 2^20 |
| `BEAT_FRAMES` | 1024 |

## Where this design departs from the system it follows

- **Comb memory.** The 2^20-sample comb table is an on-chip array, written
  through AXI and read four samples per clock. The original system keeps it
  in external DDR4 memory, precisely because four combs are too large for the
  chip. A design for hardware would swap `comb_lut` for a DDR4 reader with
  the same playback port.
- **Beat table.** It holds all 1024 frames × 1024 tones per chain
  (32 Mbit). Together with the on-chip combs, four chains need about
  256 Mbit. That is far more than the RFSoC's block and ultra RAM, and far
  more than the original implementation used (17 % of block RAM, 10 % of
  URAM). The original must store its beat waveform more compactly or compute
  it. How it does so is not known, so the plain table is kept.
- **Filterbank.** The 4-tap sinc-Hann prototype, the FFT architecture and
  all word widths are this design's own choices.
- **UDP transmitter.** It is written from scratch (fixed headers, CRC-32,
  GMII). The original reuses an existing open-source UDP transmitter. The
  packet layout here is this design's own.
- **Ethernet ports.** Every chain has its own streaming port, as with a
  four-port 1 GbE card. A single shared streaming port per board would need
  a packet multiplexer, which is not built.
- **Bandwidth.** The design handles 512 MHz of complex bandwidth per chain.
  The 1 GHz per network foreseen for the highest-frequency detector arrays
  would need eight samples per clock.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=<n> failures=<n>` and fails itself through a watchdog if
the run stalls. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/readout_pkg.sv tb/tb_readout_top.sv --top-module tb_readout_top
obj_dir/Vtb_readout_top
```

- **Per-block tests.** The FFT is compared with a floating-point DFT. The
  PFB FIR is compared bit-exactly with the same arithmetic done in the
  testbench. The filterbank is checked for tone gain and leakage. The other
  datapath blocks are compared bit-exactly with models written in the
  testbenches. The packetizer test decodes whole frames, checking the IP
  checksum, lengths and CRC.
- **`tb_readout_top`** is the end-to-end test at reduced size (N = 64,
  16-frame comb). Every chain is looped from D/A back to A/D and programmed
  only through AXI with four tones, two of them in one bin, plus one
  duplicated slot. The test runs first at `nacc = 2`, so vectors are
  dropped, then switches to `nacc = 64`. It decodes every packet of all four
  chains and requires:
  - consecutive vectors bit-identical;
  - the on-bin tone within 1 % of its predicted value;
  - the offset tones still present after the beat correction;
  - sync counts and sync times matching the pulses applied.

  After that it captures the accumulator tap with a diagnostic snapshot,
  which must match the packets. It counts packets, drops, the `nacc`
  switch, sync captures, repeated-bin checks, comb wrap-arounds, stable
  vector pairs and matching snapshot values, and fails if any count is
  zero.
- **`tb_readout_full`** is the same test on `readout_top` at its default
  parameters. It loads the full 2^20-sample comb (about 3 million clocks of
  AXI writes) and switches to `nacc = 1024`. It runs in well under a minute.
