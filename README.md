# Programmable logic for an RFSoC millimetre-wave OFDM testbed

This is the fabric logic of an over-the-air OFDM testbed working at 29.8 GHz.
It was published by Tekchandani, Mangal, Darak and Ram as "An RFSoC-Based Testbed
for Over-the-Air Wireless Transceiver at Millimeter Wave Frequency". The testbed
is built on an AMD RFSoC 4x2 board. The board's processor runs the whole OFDM
physical layer as software. The RF data converter tiles on the chip produce and
sample a 3.8 GHz intermediate frequency. A commercial 4x4-element phased-array
module carries that signal to and from 29.8 GHz and steers the beam.

The key point of the architecture is this: **the fabric does almost no signal
processing.** Its job is to move samples between processor memory and the
converters at the full rate of 307.2 MSPS without losing any. Each direction
has one custom block:

- **Transmit.** A DMA reads a pre-computed frame from memory and plays it
  cyclically. A FIFO passes it on to the DAC stream.
- **Receive.** The ADC produces an endless pair of I and Q sample streams. A
  *packet generator* cuts a requested number of samples out of them and hands
  them to two DMAs, one per component.

The rest is vendor IP or software: the DMAs, the AXI interconnect, the RF data
converter, and the PHY running on the processor. So the RTL here consists of
those two blocks and the top that joins them. The vendor blocks' interfaces
are brought out as ports.

## Where each step of the signal chain runs

| Step | Rate | Runs in |
|---|---|---|
| OFDM frame build (480 complex samples, QPSK) | 30.72 MSPS | processor software |
| Interpolation by 10 and root-raised-cosine pulse shaping | 307.2 MSPS | processor software |
| Scaling to 16-bit I and Q words, packing into 32-bit beats | 307.2 MSPS | processor software |
| DMA memory to stream, cyclic | 307.2 MSPS | vendor DMA |
| **Transmit FIFO** (`axis_fifo`) | 307.2 MSPS | this RTL |
| Interpolation by 16, NCO mixing to 3.8 GHz, DAC | 4.9152 GSPS | RF data converter tile |
| Balun, up-conversion to 29.8 GHz, beamforming, air, down-conversion | analog | external |
| ADC, NCO to baseband, decimation by 16, separate I and Q streams | 307.2 MSPS out | RF data converter tile |
| **Packet generator** (`packet_generator`) | 307.2 MSPS | this RTL |
| Two DMAs, stream to memory (I and Q) | 307.2 MSPS | vendor DMA |
| Matched RRC filter, preamble autocorrelation detection, decimation by 10, frequency-offset correction, least-squares channel estimate, equalisation, QPSK demapping, BER | | processor software |

The published description also says the "digital up and down converters" are
in the FPGA. That is the one point where it is ambiguous. It also says the
processor hands an already upconverted frame to the DMA, and its block diagram
has no converter block in the fabric. This design follows the second reading.
The up and down converters are taken to be the hard DUC/DDC (NCO plus
x16 rate change) inside the converter tiles, and the x10 RRC stage stays in
software.

## The OFDM frame (traffic the fabric carries)

The logic does not depend on the frame format. The testbenches use it to
generate realistic traffic, and `testbed_pkg` records it:

| Part | Samples at 30.72 MSPS |
|---|---|
| Short preamble: 16-sample training symbol, repeated 10 times | 160 |
| Long preamble: 32-sample cyclic prefix, then a 64-sample training symbol twice | 160 |
| Data symbol 1: 16-sample cyclic prefix + 64 (48 QPSK, 4 pilots, 12 null carriers) | 80 |
| Data symbol 2: same | 80 |
| **Frame** | **480** |

Upsampled by 10, one frame is 4800 samples, or 15.6 µs at 307.2 MSPS.

## Clocking and stream formats

Everything runs on one clock, `clk`, and moves one complex sample per cycle. At
the testbed's rate that clock is 307.2 MHz. Resets are synchronous and active
low (`rst_n`).

- Transmit beat: 32 bits, `{Q[15:0], I[15:0]}`. Each component is two's
  complement, already scaled by software to the full range from -2^15 to
  2^15-1. The package names this layout `iq_t`.
- Receive beats: 16 bits on each of the I and Q streams, two's complement.

A real RF data converter often moves several samples per beat at a lower
fabric clock. In that case the datapath widths of both blocks scale directly;
the control logic does not change.

## Transmit FIFO (`rtl/axis_fifo.sv`)

This is a first-word-fall-through AXI4-Stream FIFO, 1024 beats deep by default,
storing `{tlast, tdata}`. A beat written into an empty FIFO is offered one cycle
later. Reads and writes can happen in the same cycle, so the FIFO sustains one
beat per cycle. `s_tready` falls only when all 1024 entries are occupied. The
DMA then stalls; it never loses data. `level` reports the fill level.

On the transmit side, the frame's TLAST from the DMA stops here. The DAC stream
has no packet boundaries, because the frame is played back to back.

## Packet generator (`rtl/packet_generator.sv`)

This is the one block with real control behaviour.

**Registers** (AXI4-Lite, 32-bit data, 4-bit byte addresses; the byte strobes
apply to `PKT_LEN`):

| Offset | Name | Access | Meaning |
|---|---|---|---|
| 0x0 | CTRL | W | bit 0 = 1 starts a packet; ignored while busy; reads 0 |
| 0x4 | PKT_LEN | RW | number of I/Q pairs per packet (32 bits) |
| 0x8 | STATUS | R | bit 0 busy, bit 1 done, bit 2 overrun |
| 0xC | DROPS | R | pairs lost during the current or last packet |

**Capture sequence.**

1. Software writes `PKT_LEN`, arms the two receive DMAs for that length, and
   writes `CTRL` = 1.
2. The write is taken on clock edge *T*. At edge *T+1* the block becomes busy
   and loads its down-counter.
3. The first pair captured is the first ADC pair that is valid at edge *T+2*
   or later.
4. From then on, every valid pair is moved into the I and Q output registers.
   It appears on `m_i_*` and `m_q_*` one cycle after it arrives.
5. The packet's last pair carries TLAST on both outputs, so each DMA transfer
   ends exactly there.
6. `busy` falls once both last beats have been accepted. `done` stays set until
   the next start.

A start with `PKT_LEN` = 0 sets `done` at once and sends nothing.

**Back-pressure.** The ADC cannot be paused, so `adc_*_tready` is always high.
Suppose a pair arrives while either output register still holds a beat that
its DMA has not taken. That pair is dropped, `DROPS` counts it, and `overrun`
is set. Capture continues, and the packet still ends after `PKT_LEN`
*forwarded* pairs. The packet then spans a longer stretch of time, and the
software can see that from `overrun`. The I and Q outputs load and drop
together, so the two DMA buffers always stay paired sample for sample. Their
handshakes are still independent, so one DMA may run a beat ahead of the other.

**Rate.** With both DMAs ready and the ADC valid every cycle, a packet of *N*
pairs leaves in exactly *N* consecutive cycles.

**Assertions** in the block check four things: the two ADC streams run in lock
step; an offered output beat stays stable until it is taken; and AXI4-Lite B
and R responses are held until accepted.

## Top (`rtl/rfsoc_testbed_pl.sv`)

```
 DMA MM2S ──► axis_fifo ──► DAC stream
 ADC I ──┐
         ├─► packet_generator ──► DMA S2MM (I)
 ADC Q ──┘         ▲          └─► DMA S2MM (Q)
             AXI4-Lite (control from the processor)
```

| Parameter | Default | Meaning |
|---|---|---|
| `TX_FIFO_DEPTH` | 1024 | transmit FIFO depth (power of two) |
| `PKT_LEN_W` | 32 | width of the packet-length register |

Ports fall into four groups:

- `s_axis_mm2s_*` (32-bit) from the transmit DMA, and `m_axis_dac_*` (32-bit)
  to the DAC.
- `s_axis_adc_i_*` and `s_axis_adc_q_*` (16-bit each) from the ADC.
- `m_axis_s2mm_i_*` and `m_axis_s2mm_q_*` (16-bit each) to the two receive DMAs.
- The packet generator's AXI4-Lite slave `s_axil_*`, plus `rx_busy`, `rx_done`
  and `tx_fifo_level`.

Latency is one cycle from the DMA to the DAC through an empty FIFO, and one
cycle from the ADC to the receive DMAs.

## Verification

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M` and
has a cycle watchdog.

- `tb/tb_axis_fifo.sv` checks the FIFO against a queue model:
  - fill until full, checking it goes full after exactly 1024 beats;
  - drain in order;
  - the one-cycle latency;
  - 20,000 cycles of random valid/ready traffic, with long reader stalls so the
    FIFO fills repeatedly. Level, ready and valid are checked every cycle.
- `tb/tb_packet_generator.sv` sends a running index on the ADC streams, so
  each output beat identifies its source pair. It checks:
  - register read-back, including byte strobes;
  - the exact first captured pair, consecutive pairs, and TLAST placement;
  - one beat per cycle;
  - a 4800-pair capture with gaps in the ADC stream;
  - a start written while busy is ignored;
  - randomly stalling DMAs: `DROPS` must equal the number of pairs skipped,
    and `overrun` must be set;
  - clearing by the next start;
  - `PKT_LEN` = 0.
- `tb/tb_rfsoc_testbed_pl.sv` runs the whole design end to end at its default
  parameters. It plays the processor, the DMAs and a perfect loopback from DAC
  to ADC:
  - It builds a frame with the structure above. For simplicity the QPSK points
    are placed directly in time rather than through an IFFT.
  - It upsamples the frame by 10 with a sample-and-hold and streams it
    cyclically. The DMA side is bursty and the DAC stalls at random, so the
    FIFO fills.
  - It captures two frames' worth (9600 pairs) and checks every sample against
    what was sent.
  - It finds the frame with a normalised lag-160 autocorrelation of the short
    preamble at a 0.75 threshold, and refines the timing with the long preamble.
  - It demaps the data and requires zero bit errors.
  - It then captures again with stalling receive DMAs and requires an overrun
    report.
  - It counts each mechanism at least once: FIFO-full back-pressure, DAC stall,
    DMA frame TLAST, packet TLAST, overrun and preamble detection.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb \
  rtl/testbed_pkg.sv tb/tb_rfsoc_testbed_pl.sv --top-module tb_rfsoc_testbed_pl
./obj_dir/Vtb_rfsoc_testbed_pl
```

Replace the testbench name to run the others. Each takes well under a minute.

## How far this follows the published testbed

Taken from the publication:

- the partition between processor, fabric and converters;
- the transmit path (DMA, FIFO, DAC) and the receive path (ADC, packet
  generator, two DMAs);
- the packet generator's job: a requested amount of samples from the two ADC
  streams, at the ADC rate;
- the use of AXI4-Lite for control and AXI4-Stream for samples;
- the 16-bit I and Q words and the sample rates;
- the frame format used by the testbenches.

Chosen here, because the publication does not specify them:

- the FIFO depth and the single-clock structure;
- the sample-per-beat packing and bit order;
- the packet generator's whole register map, start timing and TLAST framing;
- its drop-and-count behaviour under DMA back-pressure;
- the reset style.

Not included, because it is vendor IP, analog hardware or software:

- the AXI DMAs and the AXI interconnect;
- the RF data converter, with its NCOs, x16 interpolation and decimation
  filters, and the converters themselves;
- the processor and its PHY software;
- the baluns and the millimetre-wave beamforming front end.

The three over-the-air experiments put the same load on this logic: a
4800-sample frame on transmit, and a capture length chosen by software on
receive. They differ only in the antenna alignment and the detection threshold
used by software.
