# Coherent OFDR interrogator core for submarine-cable monitoring

Every repeater of a submarine cable has a high-loss loop-back: a coupler and
a fibre Bragg grating that return a small part of the outgoing light on the
fibre of the opposite direction. If a probe laser is swept in frequency and its echo is mixed with the
laser itself, every repeater shows up as a beat tone whose frequency is set by
its distance. The amplitude, phase and polarization of each tone tell you
about the span in front of that repeater: loss, stretch, vibration, and cable
movement. This is optical frequency-domain reflectometry (OFDR). Done
coherently, with both polarizations and all the signal processing in software,
it can watch all ~80 repeaters of a transoceanic cable at once. Because the
probe has constant power, it does not disturb the live data channels next to
it.

This repository holds the digital core of such an interrogator, written for a
radio-frequency FPGA with on-chip data converters. The core does four things:

1. It generates the probe. The probe is a linear frequency sweep 125 MHz wide,
   centred on a 500 MHz intermediate frequency. It comes out as four 14-bit
   sample streams at 6 GS/s that drive a dual-polarization IQ modulator.
2. It captures the two outputs of a polarization-diverse heterodyne receiver,
   each digitised at 2 GS/s with 14 bits.
3. It buffers the captured samples.
4. It streams the samples, unprocessed, as RDMA writes over 100 Gbit/s
   Ethernet. They land directly in the memory of a GPU server, which does the
   demodulation.

The demodulation on the server, the converters, the Ethernet MAC/PHY and the
optics are not part of this RTL.

```
                     125 MHz converter clock                         |  MAC clock (~322 MHz)
                                                                     |
 sweep_cfg ─► chirp_phase_gen (X) ─┐                                 |
          └─► chirp_phase_gen (Y) ─┴─► probe_iq_synth ─► 4 × 48 × 14 b ─► DACs ─► DP-IQ modulator
                                        (2×48 CORDICs)               |
 ADCs ─► 2 × 16 × 14 b ─► adc_capture ─► async_fifo ═════════════════╪═► rocev2_packetizer ─► AXI-Stream 512 b ─► 100G MAC
                          (groups, seq#,  (sample buffer)            |    (Eth/IPv4/UDP/BTH/RETH/ICRC)
                           drop policy)                              |
```

## Numbers that fix the datapath widths

The FPGA fabric runs the converter interfaces at 125 MHz, so the design moves
many samples on every clock:

| path | rate | samples per clock | bits per clock |
|------|------|-------------------|----------------|
| each DAC (XI, XQ, YI, YQ) | 6 GS/s, 14 bit | 48 | 672 |
| each ADC (X, Y) | 2 GS/s, 14 bit | 16 | 224 (448 in 16-bit containers) |
| capture word | both ADCs | 32 | 512 |
| Ethernet payload | 64 Gbit/s | | 512 per 125 MHz clock |

The 64 Gbit/s raw stream, plus 74 bytes of headers and ICRC per 4096-byte
packet and the Ethernet framing, needs about 65.5 Gbit/s. That fits a
100 Gbit/s link. It also fits the 512-bit MAC interface, which carries about
165 Gbit/s at 322 MHz. `ofdr_pkg` holds all of these constants.

The heterodyne receiver uses the transmit laser as its local oscillator. The
echoes therefore arrive at the same 437.5–562.5 MHz intermediate frequency as
the probe. That band lies inside the 1 GHz first Nyquist zone of the 2 GS/s
ADCs, so real sampling of one channel per polarization is enough.

## The sweep: many samples of one chirp per clock

`chirp_phase_gen` produces the phase of a tone whose frequency word rises by
`chirp` with every DAC sample. The frequency starts at `f_start` and drops
back to `f_start` after `sweep_cycles` clocks, so the sweep is a sawtooth.
Phase and frequency are 48-bit fractions of a turn. At 6 GS/s one frequency
step is 21 µHz. With the package defaults the sweep runs from 437.5 MHz to
562.5 MHz, a word of `F_START_DEFAULT = 0x12AA_AAAA_AAAA` plus a span of
`SPAN_DEFAULT = 0x0555_5555_5555`. Set `chirp` to the span divided by
`48 × sweep_cycles`.

A serial phase accumulator would need 48 additions in a row per clock.
Instead, the generator keeps only the phase `P` and frequency `F` of lane 0 and
writes every lane in closed form:

```
phase[m] = P + m·F + chirp·m(m−1)/2          m = 0 … 47
P'       = P + 48·F + chirp·48·47/2
F'       = F + 48·chirp          (or f_start at the sweep restart)
```

The multipliers by `m` and by `m(m−1)/2` are constants, so each lane costs a
few adders. The restart happens only on a clock boundary, so a sweep is a whole
number of clocks. The phase is never reset while the sweep runs. The probe
therefore has no phase jumps: at the restart only its frequency jumps.

**Two polarizations.** Both polarizations carry the same sweep, but the Y
generator starts `y_offset` clocks further into it (`start_cycle` input). At
any moment the two polarizations are at different frequencies, so their echoes
can be separated at the receiver. Separating them is what lets the server
recover the full 2×2 Jones matrix of each reflection. The offset scheme is
this design's own choice. Any `y_offset` in 1 … `sweep_cycles`−1 works.

## Constant-power IQ synthesis

`probe_iq_synth` feeds each of the 2 × 48 phases to its own `cordic_sincos`.
Each CORDIC has 16 pipelined micro-rotations and uses the top 20 bits of the
phase. The results are I = cos and Q = sin, rounded to 14 bits with amplitude
7800 (full scale is 8191). Both outputs come from the same rotated vector, so
their length stays within about two LSB of 7800 at every sample. The IQ
modulator then produces a single-sideband tone of constant optical power. The
latency is 18 clocks. A `sweep_start` marker travels with the data, so the DAC
group that starts each sweep is known.

## Capture, grouping and the drop rule

`adc_capture` packs the 16 X samples and the 16 Y samples of one clock into a
512-bit word. Bits `[16s +: 16]` hold X sample `s` and bits `[256+16s +: 16]`
hold Y sample `s`. Each sample is sign-extended, so in host memory it reads as
a little-endian `int16`. Sixty-four words, 4096 bytes, make a **group**, and a
group later becomes one packet.

Each group has a 32-bit sequence number. The rule that keeps the stream
consistent when the link cannot keep up:

* A group is written only if the buffer has room for all 64 of its words when
  its first word arrives. Otherwise the whole group is dropped and counted.
* A dropped group still uses up its sequence number.
* When `capture_en` falls, the group in progress is finished.

On the host, the sequence number fixes both the group's slot in the receive
ring and its time: group *n* holds ADC words 64n … 64n+63 counted from
the start of capture. A drop therefore leaves a hole in the ring but never
shifts later data. Transmit and receive share one clock. If `probe_en` and
`capture_en` rise on the same clock, capture word 0 is taken on the clock the
first sweep group is generated; that group reaches the DAC outputs a fixed 18
clocks later (the CORDIC pipeline). This gives the host its time reference.

## Sample buffer

`async_fifo` carries the captured words, with their start flag and sequence
number (545 bits), into the MAC clock domain. It is a standard dual-clock FIFO
with Gray-coded pointers and two-flop synchronisers. It reports a conservative
free count to the capture side and a conservative fill count to the packet
side, and its read port is show-ahead. Its default depth is 1024 words, which
is 64 KiB or 16 packets.

This is where the design departs most from the reference system. There, the
capture buffer is in DDR memory, which can ride out much longer stalls on the
Ethernet side. Here the buffer does the same job in on-chip RAM. A DDR
controller would sit behind the same write and read ports.

## RoCEv2 packets

`rocev2_packetizer` waits until a whole group is buffered. It then sends the
group as one RDMA over Converged Ethernet v2 packet: *Unreliable Connected,
RDMA WRITE Only* (opcode 0x2A), UDP destination port 4791. The host's RDMA
network card writes the payload straight into GPU-visible memory without any
CPU work:

| bytes | field | content |
|-------|-------|---------|
| 0–13 | Ethernet | `dst_mac`, `src_mac`, 0x0800 |
| 14–33 | IPv4 | TOS 0, total length 4156, DF, TTL 64, UDP, header checksum, `src_ip`, `dst_ip` |
| 34–41 | UDP | `udp_src_port`, 4791, length 4136, checksum 0 |
| 42–53 | BTH | 0x2A, flags 0, P_Key 0xFFFF, `dst_qp`, PSN = seq[23:0] |
| 54–69 | RETH | VA = `va_base` + (seq mod 2^`ring_log2`)·4096, `rkey`, length 4096 |
| 70–4165 | payload | 64 capture words |
| 4166–4169 | ICRC | see below |

The MAC adds the preamble and the FCS. Because the PSN follows the sequence
number, a dropped group shows up at the receiver as a PSN gap. A UC queue pair
accepts the next WRITE Only packet anyway.

**Beat layout.** The header is 70 bytes long: one full 64-byte beat plus 6
bytes. Every payload word is therefore sent split across two beats. Output
beat *j* (for *j* ≥ 1) carries 6 held-over bytes (the header tail, or the end
of word *j*−2) followed by the first 58 bytes of word *j*−1. A packet is 66
beats long. The last beat has 10 valid bytes (`tkeep` = 0x3FF): the final 6
payload bytes and the ICRC.

**ICRC.** This is a CRC-32 (Ethernet polynomial, bit-reflected, initial value
all ones, result inverted). It covers eight 0xFF bytes followed by the packet
from the IP header to the end of the payload. Fields that routers may change
are replaced by 0xFF for the calculation: IP TOS, TTL and checksum, the UDP
checksum, and the reserved BTH byte. The ICRC is sent least significant byte
first, like an FCS. One beat of CRC (up to 64 bytes) is computed per clock by
`ofdr_pkg::crc32_bytes`, which synthesis unrolls into XOR trees.

The stream follows AXI-Stream rules: data stays stable while `tvalid` is high
and `tready` is low, and since a packet starts only when its whole group is
buffered, `tvalid` never drops inside a packet. Counters report packets sent,
stalled cycles and, for robustness, words discarded to find a group start
(which cannot happen in normal operation).

## Top level and configuration

`ofdr_top` wires the blocks together and brings out everything that belongs
to parts outside the FPGA fabric:

* the DAC sample buses `dac_xi/xq/yi/yq` (48 × 14 bit each), with `dac_valid`
  and `dac_sweep_start`;
* the ADC sample buses `adc_x/adc_y` (16 × 14 bit each) with `adc_valid`;
* the 512-bit AXI-Stream `tx_*` to the 100G MAC, in `mac_clk`;
* statistics counters.

Configuration arrives as two packed structs, `sweep_cfg_t` and `net_cfg_t`,
defined in `ofdr_pkg`. They are meant to be written while the matching enable
is low. There is no register bus: how the configuration reaches the core is
left to the integrator. Each clock domain has its own active-low asynchronous
reset, and both resets must be asserted together.

## What follows the reference system and what is this design's own

Taken from the reference system:

* the 125 MHz fabric clock;
* 14-bit converters: four DAC outputs at 6 GS/s and two ADC inputs at 2 GS/s;
* a 125 MHz sweep centred on 500 MHz;
* a constant-power, single-sideband, dual-polarization probe;
* heterodyne capture;
* a buffer in front of the network;
* RDMA packets over 100 Gbit/s Ethernet into GPU memory.

This design's own choices:

* the sawtooth sweep shape and its run-time period;
* the 48-bit phase format;
* CORDIC synthesis and the amplitude of 7800;
* the time-offset polarization scheme;
* the sample packing;
* 4096-byte groups with sequence numbers and whole-group drops;
* an on-chip buffer of 1024 words instead of DDR;
* the UC RDMA-write transport, its header constants and ring addressing;
* the separate MAC clock domain;
* struct-based configuration.

The reference system calls its packets "RDMAv2". Here that name is read as
RoCEv2.

Not included:

* the DDR memory and its controller;
* the 100G MAC and PHY;
* the RF converters;
* the host software that turns the samples into the phase and Jones matrix of
  each repeater.

## Files

| file | contents |
|------|----------|
| `rtl/ofdr_pkg.sv` | constants, configuration and buffer-word types, CRC-32 function |
| `rtl/chirp_phase_gen.sv` | parallel sweep phase generator |
| `rtl/cordic_sincos.sv` | pipelined CORDIC (helper of `probe_iq_synth`) |
| `rtl/probe_iq_synth.sv` | 4-channel constant-envelope IQ synthesis |
| `rtl/adc_capture.sv` | ADC packing, grouping, drop rule |
| `rtl/async_fifo.sv` | dual-clock sample buffer |
| `rtl/rocev2_packetizer.sv` | RoCEv2 RDMA WRITE framing with ICRC |
| `rtl/ofdr_top.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Simulation

Every testbench checks itself and ends by printing
`TB_RESULT checks=<n> failures=<m>`. Every testbench also has a watchdog.

* `tb_chirp_phase_gen` compares every lane with a sample-by-sample
  accumulator.
* `tb_probe_iq_synth` compares outputs with floating-point `cos` and `sin`
  (within 3 LSB) and checks the envelope and the 18-clock latency.
* `tb_adc_capture` checks packing, sequence numbers, drops and the
  finish-the-group rule.
* `tb_async_fifo` checks ordering and the conservative counts across two
  unrelated clocks.
* `tb_rocev2_packetizer` rebuilds every packet byte by byte, including a
  bit-serial ICRC, under random back-pressure.
* `tb_ofdr_top` runs the whole core at its default sizes. A short sweep wraps
  many times, and the DAC outputs are checked against a reference sweep. A toy
  loop-back feeds every third DAC sample into the ADCs. Every packet is
  parsed, and its PSN, ring address, payload, IP checksum and ICRC are
  checked. A long MAC stall forces the buffer to overflow. The testbench
  counts sweep wraps, packets, MAC stalls, dropped groups, ring wraps and
  groups finished after capture stopped, and fails if any of these never
  happens. It also checks the rate. No group may be dropped while the MAC
  accepts 80 % of beats. Back-to-back packets must be exactly 67 MAC clocks
  apart (66 beats plus one idle clock). At 322 MHz that is a capacity of about
  157 Gbit/s, against the 64 Gbit/s needed.

With plain Verilator, from the repository root:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/ofdr_pkg.sv tb/tb_ofdr_top.sv --top-module tb_ofdr_top
./obj_dir/Vtb_ofdr_top
```

Replace `tb_ofdr_top` with any other testbench name to run it. The full-size
run builds in about half a minute and simulates 30 µs in under a second.

## Limits worth knowing before reuse

* Configuration inputs cross into the MAC domain without synchronisation.
  Change them only while streaming is disabled.
* The CRC of a 64-byte beat is one large XOR network. At 322 MHz on a real
  device it may need a pipeline stage.
* The 1024-word buffer absorbs only about 8 µs of MAC stall at 64 Gbit/s.
  Longer stalls drop groups, which is where the DDR buffer of the reference
  system would help.
* The bit-accurate tests check the arithmetic and the framing. The CORDIC
  outputs are checked against a 3-LSB tolerance. No spectral-purity analysis
  of the probe was done.
