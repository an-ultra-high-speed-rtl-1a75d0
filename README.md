# FPGA logic for a 5 Gsps, 10-bit waveform digitizer with gigabit Ethernet readout

A fast ADC with four 1.25 Gsps cores sends 10-bit samples over 40 LVDS lanes,
about 50 Gb/s in total. The FPGA design here turns that into something a PC can
use over an ordinary gigabit Ethernet link, which is 50 times slower. It works in
records:

- The PC arms the board over UDP with a record length.
- The next external trigger starts a capture at full ADC rate into DDR3 memory.
- The stored record is then read back and sent to the PC as UDP packets, each
  with 1024 bytes of payload.

Before any of this can work, every LVDS lane must be aligned. Each lane's sampling
point is moved into the middle of its data eye, and its word boundary is made to
match the sample bits. This is done once at power-on by a dynamic phase
alignment (DPA) sequence, while the ADC sends a known training pattern. A second
UDP command, the network test, makes the board send a given number of packets
of counter data. It measures what the Ethernet link and the PC can sustain.

This repository holds the SystemVerilog for the FPGA fabric logic. It also holds
self-checking testbenches with behavioural models of what lies outside the
fabric: the ADC lanes with their delay lines and deserializers, the DDR3
controller, and the host PC.

```
                 clk_adc (156.25 MHz)              clk_ui (DDR3 user clock)   clk_eth (125 MHz)
 40 LVDS lanes   +-----------+  +-----------------+ capture  +---------------+ upload  +-------------------+
 -> IODELAY  --> | dpa_module|->| data_processing |--FIFO--->| ddr_sequencer |--FIFO-->| upload_packetizer |--+
 -> ISERDES 1:8  | (bitslip, |  | trigger, arm,   | 32x512 b |  app_* port   | 32x512 b+-------------------+  |
 (outside)  <--- |  DPA FSM) |  | frame, gearbox  |          |  to DDR3 ctrl |                     net_test --+
  tap, load      +-----------+  +-----------------+          +---------------+                                |
                                        ^ arm (pulse sync)          ^ start (pulse sync)          udp_tx <---+
 trig_in --------(2-flop sync)----------+                           |                               |
                                      cmd_rx <-- eth_mac_rx <-- rgmii_rx <-- RGMII rx    eth_mac_tx --> rgmii_tx --> RGMII tx
```

## Lane alignment (DPA)

This is the most delicate part of the design. It is split over three modules:

- `bitslip` shifts the word boundary.
- `dpa_lane_fsm` is the controller for one lane.
- `dpa_module` holds the 40 lanes and the power-on sequence.

The IODELAY and ISERDES primitives are not in the RTL. Per lane, the design
outputs a tap value (`iodelay_tap`, 5 bits) with a one-cycle load strobe
(`iodelay_ld`). It takes in the 8-bit deserialized word (`lane_raw`).

**Word convention.** Each lane carries one bit position of one ADC core:
lane `c*10 + b` is bit `b` of core `c`. An 8-bit lane word holds eight
successive samples of that bit, with the oldest in the MSB. The training
pattern is `8'h0F`, i.e. each bit is 1 for four samples and then 0 for four
samples. Once a lane is word-aligned, its word must read exactly `0F`.

**Bitslip.** The boundary is shifted in fabric, not in the ISERDES.
`bitslip` keeps the previous word and forms a 16-bit history `{prev, cur}`.
It outputs the 8-bit window that starts `slip_count` bits after the oldest
stored bit. Each pulse on `slip` moves the window one bit later, wrapping
after 8. The output is registered, so it lags the input by one cycle.

**Per-lane controller.** The order of steps follows a flow chart of the
original design:

1. Reset the delay to tap 0 and take a reference word.
2. Increase the tap by one until the left edge of the eye is found, and
   record it.
3. Keep increasing until the right edge is found, and record it.
4. Set the tap to the centre, `(left + right) / 2`.
5. Pulse BITSLIP once at a time until the training word appears.
6. Done.

The edge rule is this design's own. After each tap change the controller
waits `SETTLE` = 4 cycles, then watches `OBS` = 8 words. A tap *shows a
transition* in either of two cases:

- The watched words are not all equal. The sampling point is in jitter.
- They are equal but differ from the word at the previous tap. The sampling
  point crossed a bit boundary.

The left edge is the first tap that shows a transition. Near an edge a
noisy region can span several taps, so the right edge is the next
transitioning tap *after at least one quiet tap*. That is how a noisy left
edge is not mistaken for the right one. The controller then waits for the
new word to settle and checks it against `8'h0F`. If it does not match, it
slips and checks again.

The controller raises `error` together with `done` in two cases:

- The tap counter runs out (tap 31) before both edges are found.
- `MAX_SLIPS` = 16 slips never produce the pattern.

Each tap step costs about 13 word clocks. A full sweep over 32 taps plus up
to 8 slips takes well under 1000 cycles, i.e. a few microseconds.

A tap is assumed to be about a tenth of a bit period. Xilinx 7-series IDELAY
taps are about 78 ps, and a 1.25 Gb/s bit is 800 ps. So 32 taps span about
three bits, and there is always a whole eye between two edges. If your
delay line has much coarser taps relative to the bit period, check `TW`
and the edge rule.

**Power-on sequence (`dpa_module`).**

1. After reset, `adc_train_mode` goes high to ask the ADC for its training
   pattern.
2. `adc_spi_cfg` writes the ADC's test-pattern register. The module waits
   until the write has finished (`cfg_busy` low), then `CFG_WAIT` = 64
   more cycles for the ADC to switch.
3. It starts all 40 lane controllers at once.
4. When every lane is done, `adc_train_mode` drops and `dpa_done` rises.
   `dpa_error` / `lane_error` report lanes that failed.
5. `adc_spi_cfg` writes the register back to normal sampling. Only after
   that write are the lanes treated as ready: triggers are ignored and ARM
   is refused until then.

`restart` runs the sequence again.

**ADC configuration writes.** `adc_spi_cfg` keeps track of the mode it
last wrote. Whenever that differs from `adc_train_mode`, and once after
reset, it sends one write on the ADC's serial port:

- chip select low;
- 24 bits, MSB first: a write flag `1`, a 7-bit register address and
  16 data bits;
- data changes while the clock is low and is sampled on the rising edge
  (SPI mode 0);
- clock = word clock / (2 × `DIV`), so a write takes about 100 cycles.

The register address and the two values (`REG_ADDR`, `VAL_TRAIN`,
`VAL_NORMAL`) are placeholders. Set them, and the frame format if it
differs, from the datasheet of the ADC you use. No other ADC setting
(channel mode, gain, offset) is written.

## From lane bits to memory words

`data_processing` runs on the ADC word clock. It regroups the 40 aligned
lane words into a 320-bit *frame* of 32 samples, 8 per core. Sample `j`
(0 = oldest) of core `c` sits at frame bits `[(j*4 + c)*10 +: 10]`.
In the ADC's one-channel 5 Gsps mode the cores sample in turn. If the cores
are numbered in sampling order, the frame is therefore already in time order.

The `gearbox` packs frames densely into 512-bit memory words,
little-endian. The first frame fills the lowest bits of the first word, and
a frame that straddles two words puts its low part first. There is no
padding: 8 frames make exactly 5 words. Seen as one bit stream, a record
holds sample `k` at stream bits `[10k +: 10]`, with `k = 32*frame + 4*j + c`.
The upload sends each 512-bit word lowest byte first. So on the PC:

```
stream bit n  = bit (n % 8) of payload byte (n / 8), counting bytes over all packets of the record in order
sample k      = stream bits [10k .. 10k+9], LSB first
              = core (k % 4), sample ((k / 4) % 8) of frame (k / 32)
```

**Arming and triggering.** An accepted ARM command carries a length `L` in
packets. One packet is 1024 bytes, i.e. 16 memory words, so `L*16` words
are captured. The command reaches the ADC domain as a pulse and arms the
block. The external trigger goes through a two-flop synchronizer. If the
trigger is first seen high at word-clock edge `t`, the first captured frame
is the lane word present at edge `t+2`. The capture is post-trigger only.

**Overflow.** The ADC cannot be paused. If the capture FIFO is full when a
word is ready, that word is dropped and the sticky `capture_overflow` flag is
set until the next arm. Capture goes on until `L*16` words have really been
written, so the record has the right length but contains a gap. The
ADC-side rate is 320 bits × 156.25 MHz = 50 Gb/s, i.e. 97.7 M words/s.
The DDR3 controller must take writes at least that fast on average. With a
200 MHz user clock that is 49 % of its peak.

## DDR3 record

`ddr_sequencer` drives the app_* user interface of the vendor-generated
DDR3 controller. The controller is not part of this RTL. The sequencer
works in two phases:

- **Write.** Each word taken from the capture FIFO becomes one write
  command at address `index*8`, since the controller counts 64-bit units
  and one word is a burst of 8. Command and data go in the same cycle, when
  both `app_rdy` and `app_wdf_rdy` are high.
- **Read back.** After the last write, the record is read back from address
  0 in order. A read is issued only while the reads in flight plus the words
  already in the upload FIFO leave room in that FIFO. Returned data,
  which cannot be stalled, therefore always fits.

Nothing is issued before `init_calib_complete`. Record lengths go up to
2^22 packets = 2^26 words = 4 GiB, which needs the full 29-bit `app_addr`.
At 50 Gb/s that is 0.69 s of signal.

A new ARM is refused until the previous record has been completely sent
(`record_busy`).

## Host protocol

The board listens on UDP port `CMD_PORT` (5000) at `LOCAL_IP`
(192.168.1.10) and `LOCAL_MAC` (02:00:00:00:00:01). These are parameter
defaults to be changed per board. Commands are UDP datagrams with at least
5 bytes of payload:

| byte | meaning |
|---|---|
| 0 | opcode: 1 = ARM, 2 = NET_TEST |
| 1–4 | argument, big-endian |

- **ARM.** The argument is the record length in packets, 1..2^22. It is
  refused, and counted in `cmds_rejected`, in three cases: before lane
  alignment has finished and the ADC is back in normal mode, while a record is still being uploaded, or when
  the length is out of range.
- **NET_TEST.** The argument N = 1..256 is the number of packets to send.
  Other values are ignored and counted in `net_test_rejected`. The payload
  is a 32-bit counter, most significant byte first. It keeps counting
  across packets and across requests, so the PC can spot any lost or
  corrupted packet. A request that arrives while packets are still pending
  adds to them.

`cmd_rx` accepts a frame only if all of the following hold:

- The FCS is good and there was no receive error.
- The destination MAC is the board's or broadcast.
- The EtherType is IPv4.
- The IP header is 20 bytes.
- The protocol is UDP.
- The destination IP and port are the board's.
- The UDP length is at least 13.

Frames that fail are counted in `frames_dropped`. The sender's MAC, IP and
port are kept from the latest accepted command, and all replies go there.
There is no ARP: the PC needs a static ARP entry for the board, or must
send from a socket that does not need one.

**Reply packets** (`udp_tx`) are always 1066 bytes long:

- 14 bytes of Ethernet header.
- 20 bytes of IPv4 header: total length 1052, incrementing ID, don't
  fragment, TTL 64, header checksum computed.
- 8 bytes of UDP header: source port `CMD_PORT`, length 1032, checksum 0
  (allowed for IPv4).
- 1024 bytes of data.

Record packets and network-test packets can both be waiting. `udp_tx` then
takes them in turn, one whole packet at a time. The PC tells them apart by
content and order. Record packets of one record arrive in order.

## Ethernet MAC and the RGMII link

The PHY is a gigabit transceiver reached over RGMII. RGMII carries a byte
per 125 MHz cycle as two nibbles, the low nibble on the rising edge. A
control line is DV (or TX_EN) on the rising edge and DV xor ER on the
falling edge. The double-data-rate I/O registers on the pins (ODDR/IDDR on
a Xilinx part) are left to the pin-level design, together with the
transmit clock output and its skew. The top gives and takes their two edge
values per pin as 5-bit `{ctl, d[3:0]}` buses:

- `rgmii_tx_rise` / `rgmii_tx_fall` out;
- `rgmii_rx_rise` / `rgmii_rx_fall` in.

`rgmii_tx` only re-encodes the MAC's GMII byte, one cycle later.

`rgmii_rx` has the harder job. The PHY's receive clock `rgmii_rxc` is
recovered from the link. It is nominally 125 MHz but comes from the
other end's crystal, so it drifts against `clk_eth` by up to a few
hundred ppm. The MAC receiver needs DV to stay high without gaps for a
whole frame. So the adapter works like this:

- It writes the bytes of a frame, plus an end-of-frame marker, into a
  16-entry dual-clock FIFO.
- On the `clk_eth` side, it waits until 4 entries are buffered.
- It then plays the frame out without a break until the marker.

Four bytes of slack cover both the drift over a maximum-length frame
(200 ppm of 1522 bytes is under one byte) and the synchronizer lag of
the fill count. Should the FIFO still run dry mid-frame, the adapter
sends the bytes with ER set. The frame is then discarded rather than
passed on with a hole.

`eth_mac_tx` sends:

- 7 preamble bytes and the SFD.
- The frame, padded to 60 bytes.
- The FCS: CRC-32, reflected polynomial 0xEDB88320, sent complemented and
  low byte first.
- 12 idle bytes of inter-frame gap.

`eth_mac_rx` finds the SFD and passes bytes through a 5-byte delay line.
That lets it mark the last byte before the FCS. It checks the CRC over
frame plus FCS against the residue 0xDEBB20E3, and reports `good` on the
cycle after `rx_dv` falls.

Line rate: each 1024-byte payload costs 8 + 1066 + 4 + 12 = 1090 byte times,
so the payload rate can be at most 939.4 Mb/s.

## Clock domains and crossings

| domain | clock | blocks |
|---|---|---|
| adc | ADC word clock, 156.25 MHz (lane rate / 8) | dpa_module, adc_spi_cfg, data_processing |
| ui | DDR3 controller user clock | ddr_sequencer |
| eth | 125 MHz local clock, also the RGMII transmit clock | MAC, UDP, commands, network test, upload packetizer, rgmii_tx |
| rxc | RGMII receive clock from the PHY | write side of `rgmii_rx` |

Data crosses in two dual-clock FIFOs (`async_fifo`). Each is 32 words of
512 bits, with Gray-coded pointers and two-flop synchronizers. It
has first-word fall-through and conservative fill counts on both sides.
Single events (arm, start) cross by toggle `pulse_sync`. The record length
is held in the eth domain and only changes while no record is in progress,
so the other domains may read it directly. Levels such as `dpa_done` and
the trigger use `sync_bit`. Each domain gets its own reset from `rst_n`
through `reset_sync`: asserted asynchronously, released synchronously.

Status outputs are in the domain of the block that drives them:

- `dpa_*` and `capture_*`: adc domain.
- `ddr_busy`: ui domain.
- All others: eth domain.

## Top-level interface (`digitizer_top`)

| group | ports | notes |
|---|---|---|
| reset | `rst_n` | asynchronous, active low; each clock domain gets its own synchronized release |
| ADC lanes | `clk_adc`, `lane_raw[40][8]`, `iodelay_tap[40][5]`, `iodelay_ld[40]` | deserialized words in; a tap value per lane out, loaded on the one-cycle strobe |
| ADC control | `adc_spi_csn/sclk/mosi`, `adc_train_mode`, `trig_in` | serial configuration port; training request, for status; external trigger, asynchronous |
| DDR3 controller | `clk_ui`, `init_calib_complete`, `app_addr[29]`, `app_cmd`, `app_en`, `app_rdy`, `app_wdf_data[512]`, `app_wdf_wren`, `app_wdf_end`, `app_wdf_rdy`, `app_rd_data[512]`, `app_rd_data_valid` | the vendor controller's user interface, one 512-bit word per command |
| Ethernet | `clk_eth`, `rgmii_tx_rise/fall[5]`, `rgmii_rxc`, `rgmii_rx_rise/fall[5]` | edge values of the RGMII DDR registers, `{ctl, d[3:0]}` |
| status | `dpa_done`, `dpa_error`, `capture_armed`, `capture_active`, `capture_overflow`, `ddr_busy`, `record_busy`, `pkts_sent`, `cmds_rejected`, `net_test_rejected`, `frames_dropped` | see the clock-domain list above for which clock each belongs to |

Parameters: `LOCAL_MAC`, `LOCAL_IP` and `CMD_PORT` set the board's
addresses. `CFG_WAIT` is the settling time after an ADC register write.
`CAP_AW` and `UPL_AW` set the FIFO depths (2^AW words of 512 bits each).

## Departures from the original design, and what is outside this RTL

- **Outside this RTL:** the analog front end, the ADC, the clock
  synthesis, the IODELAY/ISERDES primitives, the
  vendor DDR3 controller and memory, and the Ethernet PHY.
- **RGMII DDR registers outside:** RGMII is built up to the
  double-data-rate I/O registers; those vendor primitives are not
  included.
- **Deserialization is 1:8** (assumed). The 156.25 MHz word clock follows
  from it.
- **Channel modes** (4 × 1.25, 2 × 2.5 or 1 × 5 Gsps) are set in the ADC.
  The FPGA always stores all four cores. Picking and interleaving the
  channels is done on the PC using the sample layout above.
- **Own choices, not given in the original:**
  - the edge-detection rule, the error exits and the DPA timing constants;
  - the frame layout and packing;
  - arming, post-trigger-only capture and overflow handling;
  - write-then-read DDR3 ordering;
  - command format, opcodes, addresses and ports;
  - the ADC serial-port frame and register values (placeholders);
  - 32-bit counter format and queueing of network-test requests;
  - FIFO depths.
- **Not implemented:**
  - no pre-trigger samples;
  - no ARP or ICMP;
  - no UDP checksum;
  - no retransmission; lost packets must be re-requested by a new record.
- **One DPA controller per lane**, all running in parallel. A single shared
  controller stepping through the lanes would also match the original.

## Performance against the original measurements

| workload | in this design |
|---|---|
| network test, N = 1…256 packets per request | simulated with no host delay: 885 Mb/s at N = 1 up to 938 Mb/s at N = 256. The original board measured 44 Mb/s at N = 1 and 813 Mb/s at N = 256. The gap there was host turnaround between requests, which the FPGA does not limit. |
| 4 GB record, 600 ms | up to 2^22 packets = 4 GiB = 0.69 s at 50 Gb/s |
| FFT record of 98240 samples at 5 Gsps | 122800 bytes = 120 packets; captured, uploaded and checked sample by sample in simulation |
| all channel modes | same 50 Gb/s stream in every mode |

Effective resolution (ENOB), clock jitter and analog bandwidth depend on
the analog parts and cannot be judged from this RTL.

## Testbenches and how far to trust the design

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>`.

| testbench | what it checks |
|---|---|
| `tb_bitslip` | window against a reference for random words and slips |
| `tb_dpa_lane_fsm` | five lanes with different skews; centre tap inside the eye; pattern locked |
| `tb_dpa_module` | all 40 lanes aligned; training mode sequence; no tap moves while the ADC is being configured; restart |
| `tb_adc_spi_cfg` | register writes against a serial-port model: one per mode change, complete 24-bit frames, mode-0 timing, the ADC ends in the requested mode |
| `tb_data_processing` | frame layout, trigger latency, exact length, overflow behaviour |
| `tb_ddr_sequencer` | addresses, data round trip, upload FIFO never overflows, controller stalls |
| `tb_eth_mac_tx` / `tb_eth_mac_rx` | frames of many sizes against an independent bit-serial CRC; padding, IFG, bad FCS, `rx_er` |
| `tb_udp_tx` | all header fields and IP checksum against a reference builder; round-robin between sources |
| `tb_rgmii` | frames of up to 1530 bytes through the receive adapter with the PHY clock 500 ppm fast and 500 ppm slow: each comes out unbroken and unchanged; transmit encoding |
| `tb_cmd_rx` | accepted commands and each rejection reason |
| `tb_net_test` | N = 1, 3, 256 and rejected 0, 257; continuous counter |
| `tb_upload_packetizer` | byte order, packet boundaries, no underrun |
| `tb_digitizer_top` | end to end, see below |
| `tb_workloads` | the network-test sweep and the 98240-sample record above |

`tb_digitizer_top` connects the full design at default sizes to three
models: 40 lane models with different skews and jitter (they send the
training pattern only while the ADC model's register, written over the
serial port, says so), a DDR3 controller
model with random stalls and a calibration delay, and a host that builds
frames with an independent reference package. The host sends on a PHY
receive clock 100 ppm off the design's Ethernet clock. It checks:

- an ARM before alignment is refused;
- a 3-packet record arrives intact, and the unpacked samples form an
  unbroken ramp;
- a network test sent during an upload interleaves correctly with it;
- a record taken while the memory is held off overflows, and the flag and
  the gap in the samples are detected.

The models are behavioural. The lane model follows an idealised eye with
10 taps per bit. The DDR3 model obeys the app_* handshake but not the
vendor core's exact latencies. No synthesis for a real device and no timing
closure are part of this work. The widest paths to watch are the
832-bit gearbox shifter at 156.25 MHz and the CRC at 125 MHz. RGMII pin
timing (clock-to-data skew) must be set up with the I/O registers. The design
has not run on hardware.

**Simulating** with Verilator 5 (packages first, then the testbench):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/digitizer_pkg.sv tb/eth_ref_pkg.sv tb/tb_digitizer_top.sv --top-module tb_digitizer_top
./obj_dir/Vtb_digitizer_top
```

Replace the testbench name to run another one. The top-level run takes
well under a minute. Block testbenches that use no Ethernet reference do
not need `tb/eth_ref_pkg.sv`.

**Changing sizes.**

- `digitizer_pkg` holds the lane count, deserialization factor, tap width,
  training word, word widths, payload size and maximum record length.
- FIFO depths are `CAP_AW`/`UPL_AW` on `digitizer_top`.
- DPA timing is `SETTLE`, `OBS` and `MAX_SLIPS` on `dpa_lane_fsm`, and
  `CFG_WAIT` on `dpa_module`.
- The sample layout formula above assumes 4 cores × 10 bits and 8-bit lane
  words. The gearbox needs the frame width to be at most the memory word
  width.
