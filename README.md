# Photon time-tagging readout for a 64-pixel Geiger-mode APD imager

Some optical transients, such as the brightening of the Crab pulsar that
coincides with its giant radio pulses, last well under a millisecond. To
study them, an instrument has to record *every single photon* with an
absolute time stamp. This design does that for an 8 x 8 array of Geiger-mode
avalanche photodiodes. Each pixel's current pulse is shaped and
discriminated by a front-end ASIC with 16 channels. This SystemVerilog
implements the FPGA logic behind those ASICs:

* it looks at all 64 comparator outputs every 5 ns;
* it stamps each sample that contains a hit with GNSS time, to 100 ns
  resolution;
* it streams the resulting packets to a PC over TCP;
* it lets the PC set the sensor high voltage and the per-channel
  thresholds, which it sends to the devices over SPI.

The architecture follows a published description of such an instrument, in
which one board and one FPGA read all 64 channels. That description gives
the block structure and the time-stamping rule. It gives no formats,
widths or protocols. Those choices are made here and marked as such below.

## Block diagram

```
 hit_in[63:0] ──> hit_edge_detect ──> data_gen ──> sync_fifo ──> tx_serializer ──> TCP byte port
 (ASIC comparators,   5 ns samples,    packet per   1024 x 128 b   16 bytes/packet     (Ethernet core)
  after LVDS bufs)    rising edges     hit sample
                                          ^
 gnss_clk10, gnss_pps ──> time_counters ──┘  (PPS count, 10 MHz count)
 gnss_rxd ──> gnss_uart_rx ──> gnss_msg_latch ──┐
                                                v
 RBCP bus (Ethernet core) <──> rbcp_regs ──> spi_ctrl ──> spi_master ──> SPI: HV DAC (cs 0),
                                                                          ASIC 0..3 (cs 1..4)
```

Everything runs on one clock, `clk`, which is 200 MHz (5 ns). On the board
it would be derived from the GNSS receiver's 10 MHz reference by an FPGA
clock generator, which is not part of this RTL. The GNSS signals, the
comparator outputs and the serial line are asynchronous to `clk`. Each
enters through a two-flip-flop synchroniser.

## From photon to packet

1. **Sampling (`hit_edge_detect`).** The 64 hit lines are sampled on every
   `clk` edge. After synchronisation, a 0 -> 1 transition between two
   consecutive samples marks a hit in that sample, so a comparator pulse
   counts once however long it lasts. A pulse must be high across at least
   one sampling edge to be seen. In practice that means at least 5 ns wide.
   It must also be low for one sample before the next pulse on the same
   channel can count. The hit vector appears 3 cycles after the sampling
   edge.
2. **Packet building (`data_gen`).** During a run, every sample whose hit
   vector is not all zeros becomes **one** packet. The packet holds the
   whole 64-bit hit pattern and the two time counters of that same cycle.
   Samples without a hit produce nothing. So a laser flash that reaches all
   pixels within one 5 ns sample yields a single packet with all 64 bits set.
3. **Buffering (`sync_fifo`).** Packets wait in a 1024-entry, 128-bit FIFO.
4. **Transmission (`tx_serializer`).** Packets leave as 16 bytes each, most
   significant byte first, on an 8-bit write/full port. A packet takes
   17 cycles when the port is not full, which is 188 MB/s at 200 MHz. That
   is more than a gigabit link can carry, so the link is the limit.

If a packet meets a full buffer, it is dropped and counted. This happens
when the PC stalls for longer than the buffer can absorb. The 32-bit lost
count can be read over the register bus, and status bit 2 flags it. Both
are cleared when a run starts.

### Packet format (128 bits, sent MSB first)

| bits      | field      | meaning                                                |
|-----------|------------|--------------------------------------------------------|
| [127:120] | header     | `0xA5` photon data, `0x5A` run-start marker             |
| [119:88]  | `pps_cnt`  | PPS pulses since the run started                        |
| [87:64]   | `tick_cnt` | 10 MHz reference cycles since the last PPS (100 ns)     |
| [63:0]    | `hits`     | bit *n* set if channel *n* had a rising edge            |

Pixel numbering is the designer's choice. The workload testbench uses
channel = 8*y + x. The four ASICs take channels 16k to 16k+15.

## Time stamps

The time of a hit comes from two counters in `time_counters`:

* `pps_cnt` counts rising edges of the GNSS pulse-per-second.
* `tick_cnt` counts rising edges of the GNSS 10 MHz reference, and goes back
  to 0 on every PPS edge. When both edges arrive in the same cycle, the PPS
  wins.

A run starts at an arbitrary phase of the PPS. Starting a run clears only
`pps_cnt`; `tick_cnt` runs on. The run-start packet (header `0x5A`,
`pps_cnt` 0, hit pattern 0) carries the `tick_cnt` of the start cycle,
which says where in the current second the run began. Every packet of the
run is then timed from one reference edge T0, the last PPS edge before the
start:

* t = T0 + `pps_cnt` seconds + `tick_cnt` x 100 ns;
* the run began at T0 + (run-start `tick_cnt`) x 100 ns.

This holds for hits before the first PPS of the run too, so no photon of
the first, partial second is lost to the time reconstruction. If a run
start falls in the very cycle a PPS edge is counted, `pps_cnt` starts at 1,
so the rule above still holds. Before the first PPS after power-up,
`tick_cnt` counts from reset, and T0 is then the end of reset.

The absolute date and time come from the GNSS receiver's
serial text messages, handled by the following two blocks:

* `gnss_uart_rx` receives 8N1 characters at 115200 baud. A glitch shorter
  than half a bit is ignored, and a character with a bad stop bit is dropped.
* `gnss_msg_latch` keeps each message from `$` up to the end of line, at
  most 80 bytes. While no run is going, every completed message replaces the
  kept copy. During a run the copy is frozen, so after the start the PC can
  read the last message received before the run began. Its length is at
  0x80 and its bytes at 0x81 onwards.

The 10 MHz and PPS inputs are sampled at 200 MHz, so a counter changes
10 to 15 ns after the reference edge. A photon within that window of a
reference edge may get the earlier or the later tick. That is well inside
the 100 ns resolution.

## Slow control

The PC accesses the FPGA through the Ethernet core's register bus (RBCP).
Each access is one byte: an address plus a write or read strobe, answered by
a one-cycle acknowledge in the next cycle. Only address bits [7:0] are
decoded.

| address     | access | content                                                  |
|-------------|--------|----------------------------------------------------------|
| 0x00        | rw     | bit 0: run enable (rising edge starts a run)             |
| 0x01        | w      | SPI update request: bit 0 HV DAC, bit 1+k ASIC k         |
| 0x02        | r      | bit 0 SPI busy, bit 1 running, bit 2 packets were lost   |
| 0x04, 0x05  | rw     | HV DAC code [15:8], [7:0]                                |
| 0x08..0x0B  | rw     | amplifier setting of ASIC 0..3                           |
| 0x0C..0x0F  | r      | lost-packet count, most significant byte first           |
| 0x10..0x4F  | rw     | comparator threshold of channel 0..63                    |
| 0x80        | r      | length of the kept GNSS message                          |
| 0x81..0xD0  | r      | GNSS message bytes                                       |

Writing values does not send them. The PC writes the values and then sets
bits in 0x01. `spi_ctrl` remembers the requests and serves them lowest
target first:

* the HV DAC gets one 16-bit frame holding the code;
* each ASIC gets 16 frames `{channel, threshold}` and then one frame
  `{0x10, amplifier}`.

Values are read when each frame starts. A request that arrives while its
target is being updated queues one more update, so the last written values
always reach the device. `spi_master` sends each frame in SPI mode 0, most
significant bit first, at 10 MHz, with one active-low select per device.
A frame takes 350 cycles (1.75 us). Updating everything takes about 69
frames, or 121 us. The PC polls status bit 0 until it clears.

The frame formats are placeholders. The real ASIC and DAC command words are
not known here. To adapt them, change `spi_ctrl`'s `frame_data` logic and
`SPI_FRAME_W`.

## Top-level ports (`imony_top`)

| port                                  | dir | meaning                                      |
|---------------------------------------|-----|----------------------------------------------|
| `clk`, `rst`                          | in  | 200 MHz clock, synchronous active-high reset |
| `hit_in[63:0]`                        | in  | comparator outputs after the LVDS receivers  |
| `gnss_clk10`, `gnss_pps`, `gnss_rxd`  | in  | GNSS 10 MHz, PPS and serial data             |
| `rbcp_act/addr/we/wd/re`, `rbcp_ack/rd` | in/out | Ethernet core register bus            |
| `tcp_tx_full`, `tcp_tx_wr`, `tcp_tx_data` | in/out | Ethernet core TCP transmit byte port |
| `spi_sclk`, `spi_mosi`, `spi_cs_n[4:0]` | out | SPI to the HV DAC and the four ASICs       |

Parameters: `FIFO_DEPTH` (1024, a power of two), `SPI_DIV` (10: SCLK is
clk / 20), `UART_CLKS_PER_BIT` (1736: 115200 baud). The channel counts,
counter widths and formats are in `imony_pkg`.

## How far this follows the instrument

These points **follow the instrument's description**:

* 64 channels read as four groups of 16;
* a hit check every 5 ns;
* a hit pattern combined with a PPS counter and a 10 MHz counter;
* the 10 MHz counter reset by each PPS, giving 100 ns resolution;
* no data when there is no hit;
* a FIFO in front of the Ethernet transmitter;
* registers on the RBCP bus, turned into SPI commands for the HV DAC and
  the ASIC thresholds and gain;
* GNSS time made available to the PC at the run start.

These points are **this design's own choices**:

* the single 200 MHz clock;
* the synchronisers and the rising-edge rule;
* the packet layout and the run-start packet;
* clearing only the PPS count at a run start, so that one PPS edge anchors
  the whole run;
* counter widths of 24 and 32 bits;
* the FIFO depth, and the drop-and-count policy when it is full;
* the byte interface and byte order toward the Ethernet core;
* the register map;
* the SPI mode, rate and frame contents;
* the serial format, and the choice to hand the GNSS message over through
  registers instead of the data stream.

These parts are **outside** this RTL:

* the Ethernet/TCP core and the SFP optical module;
* the LVDS input buffers;
* the clock generator;
* the GNSS receiver;
* the front-end ASICs, the HV DAC and the HV module.

Their signals are ports of `imony_top`. A small behavioural ASIC model,
`tb/fgati_model.sv`, exists only for simulation. It is an SPI register
receiver plus a threshold comparison, with a fixed 8 ns output pulse.

## Files

`rtl/`: `imony_pkg` (constants, packet and configuration types, register
map), `hit_edge_detect`, `time_counters`, `data_gen`, `sync_fifo`,
`tx_serializer`, `rbcp_regs`, `spi_ctrl`, `spi_master`, `gnss_uart_rx`,
`gnss_msg_latch`, `imony_top`.

`tb/`: one self-checking testbench per module, `tb_<module>.sv`. Each
compares the module with a model written independently in the testbench,
including latencies and rates where they are defined. Each prints
`TB_RESULT checks=N failures=M`. The folder also holds `fgati_model.sv` and
the following two system tests:

* `tb_imony_top` runs the whole design at its default size. It configures
  all devices over SPI and reads the GNSS message. It then runs photons
  with random back-pressure, including multi-channel and all-64 hits and
  pulses below threshold. It crosses PPS edges, overflows the buffer and
  checks the lost count, then stops and restarts a run. Every packet is
  compared bit for bit with the expected one, and the test fails if any of
  these mechanisms never happened. It takes a few seconds.
* `tb_workload_dark_laser` reproduces the two laboratory measurements for
  250 ms of real time, with real GNSS timing:
  * dark counts on every pixel at the rates of the measured dark-count map
    (31 to 13227 counts/s, 61473/s in total);
  * a 500 Hz laser lighting all 64 pixels at once.

  It checks that every pulse arrives with its time stamp, that per-pixel
  counts match, and that laser shots are 20000 ticks (2 ms) apart, across a
  PPS too. It runs in about 30 s.

## Simulating

With Verilator 5 (the `--timing` flag is needed by the testbenches):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb --top-module tb_imony_top \
  rtl/imony_pkg.sv tb/tb_imony_top.sv -o sim
./obj_dir/sim
```

Replace `tb_imony_top` with any other testbench name. For lint only:
`verilator --lint-only -Wall rtl/imony_pkg.sv rtl/<module>.sv -Irtl`. The
remaining lint warnings at the top are the two status outputs left
unconnected there (the FIFO level, the SPI engine busy flag) and the unused
bus address bits [31:8]; a single module linted alone may also list package
constants it does not use.

On synthesis, the FIFO is a plain register array of 1024 x 128 bits, which
FPGA tools map to block RAM. Its read port is asynchronous (fall-through).
For block RAM with a registered read, add one output register stage in
`sync_fifo` and keep the same interface.
