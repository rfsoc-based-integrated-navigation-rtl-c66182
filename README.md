# Two-channel NavIC passive-radar receiver: programmable-logic capture path

A NavIC satellite (India's regional navigation constellation) transmits a
1023-chip pseudo-random code at 1.023 Mchip/s on the L5 band (1.176 GHz). The
code repeats every millisecond. A passive radar can use that satellite as its
transmitter. One receive channel picks up the **direct signal (DS)** from the
satellite. A second channel picks up the **ground-reflected signal (GRS)**
that comes back from a target. Each channel is correlated against the known
code over a set of Doppler shifts, which gives one delay-Doppler map (DDM)
per channel. The target's bistatic range follows from how far the GRS peak
sits behind the DS peak. Its Doppler is read off the GRS map.

This receiver runs on an AMD Zynq RFSoC. The on-chip RF data converters
digitise both channels. The ARM processor does all correlation and map
building in software. This repository holds the logic between the two: the
block that cuts the two converter streams into matching 1 ms records and hands
them to two DMA engines. The block is small, but the range measurement rests
on it. A range offset is a difference of delays between two channels, and it
is only meaningful if both records begin on the same converter sample.

## The receive chain and where this logic sits

```
 RF in (DS) --> ADC 0 --+  16-bit I, 16-bit Q, 61.44 MS/s     +--> DMA 0 --> processor memory
                        |                                    |    (DS packet)
                        +--> [ packet_generator ] --AXI4-Stream
                        |          ^                         |
 RF in (GRS) -> ADC 1 --+          | AXI4-Lite               +--> DMA 1 --> processor memory
                                   |                              (GRS packet)
                            [ pktgen_regs ] <-- processor
```

* **Converters.** There are two RF-sampling ADCs on one converter tile, ADC 0
  for DS and ADC 1 for GRS. Each samples at 2.4576 GS/s and mixes to
  baseband with an NCO at 1.176 GHz. It then decimates by 40 and delivers
  16-bit I and 16-bit Q as two streams at 61.44 MS/s, one sample per clock.
  Both ADCs share one tile, so no multi-tile synchronisation is needed. The
  converters are vendor hard blocks and are not part of this RTL. Their
  streams are ports of the top, `navic_rx_pl_top`.
* **Packet generator** (this RTL). On command it captures `PKT_LEN` samples
  from both channels. The default is 61,440 samples, which is 1 ms. It emits
  each channel's record as one AXI4-Stream packet ending in `tlast`.
* **DMA engines.** There is one per channel. They are vendor IP and sit
  outside the top. Each one writes its packet into processor memory.
* **Processor software** (not RTL). It decimates by 8 to 7.68 MS/s in three
  stages of low-pass filtering and decimation by 2 (the matching transmit-side
  interpolators of the test set-up use 23, 15 and 15 taps). It then correlates with PRN
  replicas over 41 Doppler bins, from -10 kHz to +10 kHz in 500 Hz steps. It
  detects the satellite by a threshold on the DS map, finds the DS and GRS
  peaks, and converts the delay difference into range. At 7.68 MS/s one delay
  bin is c / 7.68 MHz = 39.06 m.

Everything runs in one clock domain: the converters' 61.44 MHz stream clock.
The AXI4-Lite port is on that clock too. Reset is synchronous and active low.

## Keeping the two records aligned

The capture controller in `packet_generator` has three states:

* `IDLE` waits for START. A START with a packet length of zero is ignored.
* `CAPTURE` counts samples. In every cycle where **all four** converter
  streams (DS I, DS Q, GRS I, GRS Q) are valid, it takes one sample from
  **both** channels at once. This is the signal `take`. A cycle where any
  stream is not valid takes nothing from either channel. The sample counter
  is shared, so the two packets cannot drift apart by even one sample. Sample
  k of the DS packet and sample k of the GRS packet are always the same
  converter instant.
* `FLUSH` begins after the `PKT_LEN`-th take. It waits until both channels
  have handed their last word to the DMA. It then sets `done`, increments the
  packet counter and returns to `IDLE`.

A START that arrives while a capture is running is ignored. It does not
restart the capture.

With free-running converters, the first sample taken is the first valid
sample after the START pulse. A 1 ms capture then takes exactly 61,440
clocks.

## Packet format

Each channel is an AXI4-Stream master with a 32-bit `tdata`. Bits 15:0 hold
I and bits 31:16 hold Q, both as two's complement, exactly as the converter
delivered them. `tlast` marks the final sample of the packet. There is no
`tkeep` and no `tuser`. A capture of `PKT_LEN` samples gives exactly
`PKT_LEN` beats on each stream, unless samples were lost (next section).

Latency: a sample taken at clock edge t is on `tdata` for edge t+1. So with
`tready` high, the first beat appears two clocks after the START pulse. The
stream then carries one sample per clock.

## When a DMA falls behind: buffering, loss and the held last sample

A converter cannot be paused, but a DMA engine can deassert `tready`. Each
channel therefore has a first-word-fall-through FIFO (`sample_fifo`,
`FIFO_DEPTH` = 1024 words of 33 bits: 32 bits of data plus `tlast`).
At 61.44 MHz this rides out a DMA stall of about 16.7 µs without loss.

If the FIFO is full when a sample is taken, that sample is dropped on that
channel only. A sticky overflow flag for the channel is set. The other
channel is not affected and still receives a complete packet.

The final sample of a packet is never dropped. If it finds the FIFO full, it
waits in a one-word holding register and enters the FIFO as soon as a word
leaves. The DMA therefore always sees `tlast` and the capture always ends.
After an overflow, the processor still gets a closed packet, and the
overflow flag tells it not to trust the sample spacing in that packet.

## Register map (AXI4-Lite, 32-bit, 4-bit byte address)

| Offset | Name      | Access | Contents |
|--------|-----------|--------|----------|
| 0x0    | CTRL      | W      | bit 0 START, bit 1 CLEAR. Each written 1 becomes a one-clock pulse; reads return 0. Needs byte strobe 0. |
| 0x4    | STATUS    | R      | bit 0 busy, bit 1 done (sticky), bit 2 DS overflow (sticky), bit 3 GRS overflow (sticky) |
| 0x8    | PKT_LEN   | RW     | samples per packet, 24 bits, reset 61,440 (1 ms). Byte strobes honoured. |
| 0xC    | PKT_COUNT | R      | packet pairs delivered since reset (16 bits) |

START clears `done`. CLEAR clears `done` and both overflow flags. An
overflow in the same clock as CLEAR still sets its flag. Address bits 1:0
are ignored, and every access answers OKAY. The write address and write data
may arrive in either order. The write response is held until it is accepted.
Read data follow the read address by one clock.

Typical use: optionally write PKT_LEN; write 0x3 to CTRL (clear and start);
arm both DMAs for `4 × PKT_LEN` bytes; poll STATUS until done; check the
overflow bits.

## Relation to the published design

**Taken from the published description:**

* The DS and GRS channels are synchronised.
* The converters are ADC 0 (DS) and ADC 1 (GRS) on one tile.
* Each ADC gives 16-bit I and Q streams at one sample per clock, at 61.44 MHz.
* A packet generator groups 1 ms of samples.
* There is one DMA engine per channel.
* The packet generator is controlled over AXI4-Lite.

The description gives the packet generator's function, not its insides.
Everything inside it is the simplest design that performs that function.

**This design's own choices:**

* the START/CLEAR control and the single-shot capture;
* the register map and its 24-bit length field;
* the rule of taking a sample only when all four streams are valid;
* the 32-bit {Q, I} word;
* the 1024-word FIFOs, the drop-on-full policy and the held final sample;
* the single clock domain.

**Not in this RTL:**

* The converters, DMA engines, AXI interconnect and processor. These are
  vendor blocks; their signals are ports of the top.
* The decimation filters and the acquisition and DDM processing. These run
  as processor software in the published system. The published description
  mentions that moving acquisition into the logic would make it about three
  times faster, but it describes no such hardware.
* The loopback test configuration. There, the same chip also plays the
  satellite: transmit sample buffers feed two DACs at 32 bits per clock (one
  I/Q pair), and receive buffers are read over memory-mapped AXI, with
  multi-tile synchronisation. This RTL implements the receiver configuration,
  where the chip is only the receiver and an external waveform generator
  provides DS and GRS.

**Small differences from the published text:**

* The sampling rate is quoted as "2.45 GHz" there. It is 40 × 61.44 MHz =
  2.4576 GHz, and the comments use the exact value.

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. Each has a watchdog.

| Testbench | Unit | What it shows |
|-----------|------|---------------|
| `tb_pktgen_regs` | `pktgen_regs` | PKT_LEN reset value and read-back; byte strobes; both AW/W orders; a late B accept; one-clock START/CLEAR pulses; STATUS bit positions; read-only registers |
| `tb_packet_generator` | `packet_generator` (FIFO_DEPTH 16) | beat-by-beat content and alignment of both packets; `tlast`; 2-clock latency; 1 sample/clock; converter gaps; back-pressure without loss; overflow with held final sample; START while busy; zero length; CLEAR |
| `tb_navic_rx_pl_top` | top, all defaults | two full 1 ms packet pairs, one of them with gaps, random back-pressure, an ignored START and a 3000-clock DS stall; a 4096-sample capture with the DS DMA stalled throughout. Counts every mechanism and fails on any that never happened. |
| `tb_navic_ddm_workload` | top, all defaults | the three target scenarios below, end to end |

In the first three testbenches, the converter model writes a running sample
number into the data (DS: I = n, Q = ~n; GRS: I = n ^ 0x5A5A, Q = n + 0x1234).
This lets the testbench tell exactly which converter sample each beat
carries.

**Target scenarios.** `tb_navic_ddm_workload` synthesises baseband DS and GRS
for three scenarios:

* y[n] = A·c[n − k]·exp(j2πf·n/61.44 MHz) plus complex Gaussian noise;
* c is a 1023-chip Gold code. The G1 and G2 polynomials are the standard
  ones. The G2 start states are stand-ins, not the official NavIC PRN values.

For each scenario the testbench captures one 1 ms pair through the top at
full size. It then repeats the processor's job in software:

* average by 8 down to 7.68 MS/s;
* search 41 Doppler bins × delays 0–299 (0–11.7 km) with the "PRN-2" code;
* take the peaks.

| SNR | true range offset | true Doppler DS / GRS | recovered range | recovered Doppler DS / GRS |
|-----|-------------------|-----------------------|-----------------|----------------------------|
| −5 dB  | 4000 m | 1500 / 500 Hz  | 3984.4 m | 1500 / 500 Hz |
| −10 dB | 6000 m | 1000 / −500 Hz | 6015.6 m | 1000 / −500 Hz |
| −12 dB | 8000 m | 500 / −500 Hz  | 8007.8 m | 500 / −500 Hz |

Each recovered range lies within one 39 m delay bin of the truth. The
"PRN-2" map clears a 15 dB peak-to-mean threshold. A map made with a
different code ("PRN-5") does not, and its peak lies 17 dB below the PRN-2
peak. These checks show that the capture logic preserves both the
inter-channel delay and the phase history. They do not verify the processor
software, which is not part of this RTL.

Running a testbench with Verilator 5 (from the repository root):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/navic_pkg.sv tb/tb_navic_rx_pl_top.sv --top-module tb_navic_rx_pl_top
./obj_dir/Vtb_navic_rx_pl_top
```

Replace the testbench name to run another one. All four finish in seconds.
`-Wno-fatal` only keeps width warnings in the testbenches from stopping the
build.
The RTL uses concurrent assertions for the stream and AXI hold rules and for
the capture counter. `--assert` turns them on.

## Files

* `rtl/navic_pkg.sv`: shared constants, the sample struct `iq_t`, the
  status struct and the register addresses.
* `rtl/navic_rx_pl_top.sv`: the top; register file plus packet generator.
* `rtl/pktgen_regs.sv`: the AXI4-Lite register file.
* `rtl/packet_generator.sv`: capture controller and two channels.
* `rtl/pkt_channel.sv`: one channel: FIFO, drop and hold logic, stream
  output.
* `rtl/sample_fifo.sv`: first-word-fall-through FIFO.
* `tb/axil_master_bfm.sv`: the AXI4-Lite master model used by the
  testbenches.
* `tb/tb_*.sv`: the testbenches above.

Parameters to change: `FIFO_DEPTH` (top and `packet_generator`) and
`PKT_LEN_RESET` (top and `pktgen_regs`). The packet length can also be set
at run time through PKT_LEN, up to 16,777,215 samples.
