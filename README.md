# CuboDAQ DAQ-board firmware: a SystemVerilog model

CuboDAQ reads out SiPM arrays through TOFPET2 front-end ASICs. A DAQ board hosts
up to four front-end boards with two ASICs each, so it serves 512 channels. Every
ASIC digitises its hits itself and sends them as 64-bit words over one 160 Mbit/s
8b10b serial line. The FPGA on the DAQ board has four jobs:

- receive the eight lines;
- stamp every hit, trigger and TTC message with one 64-bit time counted from a reset
  that all boards receive together;
- pack everything into one stream that Linux reads through a DMA core;
- give the host registers to configure the ASICs and read the board's sensors.

The time is counted in 160 MHz clock cycles. Because the reset is shared, hits from
different boards can be merged by timestamp alone. This RTL implements that firmware.
Clock generation, the DMA core, the TTC receiver chip and the ASICs themselves stay
outside, as ports.

## Data path

```
 8 x  sdata ─► des ─► dec_8b10b ─► word_framer ─► async_fifo 64x64 ─┐    (clk_160 → clk_40)
                                                                    ├─► linker ─► xb_adapter ─► sync_fifo 32x16384 ─► host
          TTC L1A / ext input / sequencer ─► trig_gen ──────────────┤   128 b      4 x 32 b
          TTC long-format B-Channel word ───────────────────────────┘
```

**Receiver lane (`rx_lane`, 8 copies).** Each line is sampled once per `clk_160`
cycle after a two-flop synchroniser. There is no oversampling: the phase of the
160 MHz clocks comes from the PLL, which can be adjusted for the cable length.

- **`des`.** Keeps the last ten bits and watches for the K28.5 comma in either
  polarity. On the first comma it fixes the symbol boundary. After that it emits one
  10-bit symbol every ten cycles, and moves the boundary again only if a comma appears
  at another offset.
- **`dec_8b10b`.** A table decoder with a running-disparity check. The disparity is
  unknown after reset and is taken from the first symbol that is not balanced (in
  practice the first comma). This matters because a lane can be reset while its ASIC
  keeps transmitting: a fixed starting disparity would report a false error half the
  time.
- **`word_framer`.** Collects eight data bytes, most significant first, into one
  64-bit word. Any K character or code error drops a partial word.
  - Words may follow each other without idle characters. A lane therefore carries at
    most 160e6 / 80 = 2.0e6 words/s.
  - This matches the ~2 MHz hit rate at which a TOFPET2 becomes limited by its link,
    if one hit is one word.
- **`async_fifo`.** A 64 x 64-bit dual-clock FIFO with Gray-coded pointers and
  first-word fall-through. It carries the words into `clk_40`.
  - A word that finds the FIFO full is dropped.
  - The lane then raises a sticky `overflow` flag. `code_err` and `locked` are sticky
    in the same way.
  - All three flags are synchronised into `clk_40` for the status register.
  - A disabled lane (a `CTRL` bit) still decodes its line but writes nothing.

**Linker.** This is the heart of the design.

- **Arbitration.** One round-robin arbiter picks one packet per `clk_40` cycle from
  ten sources: the eight lane FIFOs, a trigger queue and a B-Channel queue. Each queue
  holds 16 entries. An arrival that finds its queue full is lost, and the sticky
  `aux_lost` flag records the loss.
- **Timebase.** A 64-bit counter adds 4 on every `clk_40` edge. It therefore counts
  160 MHz cycles, on the 40 MHz grid, since the last `fe_reset`.
- **Trigger and B-Channel stamps.** Triggers and B-Channel words take the timebase
  value of the cycle in which they arrive. Their time is therefore on the 40 MHz grid
  (a multiple of 4), which is the resolution at which the TTC delivers an L1A. Hits
  keep full 160 MHz resolution.
- **Trigger number.** A trigger packet carries a running trigger number in its payload.
  The counter restarts at `fe_reset`, so the host can match a trigger to the TTC
  trigger count of the run.
- **Hit stamps.** A hit carries only the ASIC's coarse time, taken here as bits 15:0
  of the word. The linker rebuilds the full time as the latest value, not later than
  now, whose low 16 bits equal the hit's. That is `{timebase[63:16], low}`, minus
  2^16 if `low` is ahead of the timebase.
  - This is exact if two conditions hold. First, the ASIC counts from the same reset
    as the timebase; the ASICs get `fe_reset` as `tofpet_rst`. Second, a hit reaches
    the linker less than 2^16 cycles (410 us) after it happened.
  - The end-to-end testbench checks the rebuilt time bit for bit against the ASIC
    model's own clock count.

**Packet format (128 bits, this design's own layout).**

| bits    | field                                                          |
|---------|----------------------------------------------------------------|
| 127:124 | type: 1 hit, 2 trigger, 3 B-Channel                             |
| 123:120 | source: lane number for hits, 0 L1A / 1 external / 2 sequencer for triggers |
| 119:112 | zero                                                           |
| 111:64  | payload: hit word bits 63:16, the running trigger number, or the 32-bit B-Channel word |
| 63:0    | timestamp in 160 MHz cycles since `fe_reset`                   |

**XB adapter and data FIFO.**

- `xb_adapter` sends a packet as four 32-bit words, least significant first. The host
  therefore reads each packet as one little-endian 128-bit value.
- It takes the next packet in the cycle its last word leaves, so it sustains four
  cycles per packet: 10e6 packets/s.
- `sync_fifo` (32 x 16384, `clk_40`, first-word fall-through) is the data FIFO that
  the DMA core drains.
- When that FIFO is full the adapter waits. The wait counter `XB_STALL` counts those
  cycles. The back-pressure then reaches the linker and finally the lane FIFOs, which
  overflow.

## Triggers, B-Channel and resets

- **`trig_gen`.** Has three sources, each enabled by a `CTRL` bit:
  - the TTC L1A;
  - an asynchronous external input, synchronised and edge-detected, giving one
    trigger per rising edge;
  - a sequencer that fires every `TRIG_PERIOD` clocks (0 turns it off).

  When two sources fire in the same cycle, L1A wins over external, and external over
  the sequencer. The losing trigger is not kept.
- **B-Channel.** Long-format B-Channel words enter the stream only when `CTRL.bch_en`
  is set.
- **`reset_ctrl`.** Makes two resets. Each request becomes a 16-cycle `clk_40` pulse,
  so both 160 MHz domains see it.
  - `fe_reset` comes from the TTC short broadcast command `0x04` or from register
    `RESET` bit 0. It resets the receivers, the linker, the adapter and the data FIFO,
    and restarts the timebase. The trigger generator is outside this domain, so the
    sequencer keeps its phase. Through `tofpet_rst` it also restarts the ASICs' clocks.
    Configuration registers are untouched.
  - `global_reset` comes from register `RESET` bit 1 or from the processor's
    `cpu_rst`. It also asserts `fe_reset`, resets the registers and the slow-control
    cores, and drives the TTCrx and QPLL reset outputs.
  - The block starts from power-up values, so `global_reset` is asserted after
    configuration without any input.
- **Reset synchronisation.** `fe_reset` enters `clk_160` and `clk_160_tp` through
  two-flop synchronisers. `tofpet_rst` is the copy in the ASIC clock domain.

## Slow control

- **`tofpet_cfg`.** Shifts up to 256 bits from `CFG_DATA` out to one ASIC and stores
  the bits that come back in `CFG_RBACK`.
  - It sends MSB first. Data changes on the falling edge of `cfg_sclk` and is sampled
    on the rising edge, with one active-low select per ASIC.
  - The real TOFPET2 configuration protocol is defined by the ASIC vendor. This is a
    plain stand-in with the same role.
- **`spi_master`.** SPI mode 3, 1–32 bits per transfer, 13 selects: three devices on
  each front-end board plus the board EEPROM. The clock is `clk_40`/16.
- **`i2c_master`.** A byte-level master at 100 kHz. Each command writes or reads one
  byte, optionally preceded by START and followed by STOP. The outputs are open-drain
  "pull low" enables.
- **`dbg_mux`.** Drives one of eight 8-bit groups of internal signals onto the debug
  connector.

## Register map

The register bus has a 16-bit word address and 32-bit data. Read data appears one
`clk_40` cycle after `reg_rd`. Unmapped addresses read `0xDEADBEEF`.

| addr  | name        | access | contents |
|-------|-------------|--------|----------|
| 0x0000 | ID         | R  | `0xC0B00001` |
| 0x0001 | CTRL       | RW | [7:0] lane enable, [8] B-Channel in stream, [12:10] trigger enable (L1A, ext, sequencer); reset value `0x4FF` |
| 0x0002 | RESET      | W  | bit 0 fe_reset, bit 1 global_reset |
| 0x0003 | TRIG_PERIOD | RW | sequencer period in `clk_40` cycles, 0 = off |
| 0x0004 | DBG_SEL    | RW | debug group 0–7 |
| 0x0010 | LANE_STAT  | R  | [7:0] locked, [15:8] code error, [23:16] overflow, [24] trigger or B-Channel word lost (all sticky until fe_reset) |
| 0x0011 | XB_LEVEL   | R  | data FIFO fill level in words |
| 0x0012 | XB_STALL   | R  | cycles a word waited on a full data FIFO |
| 0x0013 | TRIG_CNT   | R  | trigger packets sent |
| 0x0014 | HIT_CNT    | R  | hit packets sent |
| 0x0015/16 | TS_LO/HI | R | timebase |
| 0x0100–0x0107 | CFG_DATA | RW | ASIC configuration word, 0x100 = bits 31:0 |
| 0x0108 | CFG_CTRL   | RW | write: [8:0] bit count, [18:16] ASIC, bit 31 start; read: bit 0 busy |
| 0x0110–0x0117 | CFG_RBACK | R | bits returned by the ASIC |
| 0x0200 | SPI_DATA   | RW | bits to send, right-aligned |
| 0x0201 | SPI_CTRL   | RW | write: [5:0] bit count, [11:8] device, bit 31 start; read: bit 0 busy |
| 0x0202 | SPI_RX     | R  | bits received, first one highest |
| 0x0300 | I2C_CMD    | W  | [7:0] data, 8 START, 9 STOP, 10 read, 11 NACK after read |
| 0x0301 | I2C_STAT   | R  | [7:0] byte read, 8 busy, 9 no acknowledge |

## Capacity

| case | need | this design |
|---|---|---|
| channels per board | 8 ASICs x 64 | 8 lanes |
| one ASIC at its link limit | 2e6 words/s | 2e6 words/s per lane |
| one board at its ~1.3 MHz sustained limit | 5.2e6 words/s | 40e6 words/s into the data FIFO |
| all eight lanes at full rate | 16e6 packets/s | 10e6 packets/s |

- **Where the real limit sits.** The board limit of about 1.3 MHz is the transfer to
  the host, beyond the data FIFO. This RTL does not model it.
- **Eight lanes at full rate.** The FIFOs absorb such a burst only briefly. After that
  the lane FIFOs overflow, and the overflow is flagged.
- **A 16,000-channel detector.** It needs 32 boards, kept in step by the common TTC
  clock and command `0x04`.
- **Timestamp range.** The 64-bit timebase wraps after 3,600 years.

## Where this departs from, or adds to, the source description

The block structure, the clock domains, the widths and the depths follow the published
description. The following are choices of this design:

- the packet layout;
- the register map;
- the 16-bit hit coarse time;
- the arbitration;
- the queue depths;
- the reset pulse length;
- the slow-control bus details;
- the debug groups.

Points to know:

- **TOFPET2 data format.** The hit word format and framing are assumed: eight bytes,
  MSB first, separated by K28.5. A real TOFPET2 link has its own frame format, which
  `word_framer` and the hit fields of `linker` would have to follow.
- **ASIC configuration.** `tofpet_cfg` is not the TOFPET2 protocol. It is a generic
  shift interface.
- **ASIC reset.** There is one ASIC reset line (`tofpet_rst`). It is driven by
  `fe_reset`, which `global_reset` also raises. The description distinguishes a reset
  that keeps the ASIC configuration from one that does not; that distinction is left
  to the ASIC side.
- **Coincident triggers.** Triggers from different sources in the same cycle are not
  all kept. A trigger or B-Channel word that finds its 16-entry queue full is lost;
  only a flag records it.
- **Missing blocks.** The clock PLLs, the DMA core and its Linux side, the TTCrx and
  QPLL, the processor and the board peripherals are not here. Their signals are ports
  of `cubodaq_fw`.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Examples with Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_linker \
  -y rtl -y tb +libext+.sv rtl/cubodaq_pkg.sv tb/tb_linker.sv && obj_dir/Vtb_linker

verilator --binary --timing --assert --timescale 1ns/1ps --top-module tb_cubodaq_fw \
  -y rtl -y tb +libext+.sv rtl/cubodaq_pkg.sv tb/enc8b10b_pkg.sv tb/tb_cubodaq_fw.sv \
  && obj_dir/Vtb_cubodaq_fw
```

`tb_workload_rates` loads the default-size firmware with the two rates quoted for
the system:

- one ASIC sending hits back to back, which arrive at 2.000e6 hits/s;
- all eight ASICs together at 1.3e6 hits/s of random hits, with no loss and worst-case
  latency of about 1.6 us from the ASIC's stamp to the host.

`tb_cubodaq_fw` runs the whole firmware with its default sizes. This is 1.3 ms of
board time and takes well under a minute. The parts that stand in for external
hardware are:

- eight ASIC transmitter models (`tofpet_tx_model`, using the 8b10b encoder in
  `enc8b10b_pkg`);
- a TTC driver;
- a host reader that reassembles and checks packets;
- simple configuration, SPI and I2C devices.

It checks the following, and counts a failure for any mechanism that never happened:

- every hit's payload and exact timestamp;
- L1A trigger timestamps;
- the external and sequencer triggers;
- B-Channel gating;
- timebase restart by TTC command `0x04` (and not by another command);
- a disabled lane;
- a full data FIFO with lane overflow and trigger loss;
- clearing of the flags by a register `fe_reset`;
- a code error on one lane;
- an ASIC configuration, an SPI read, an I2C byte and the debug multiplexer;
- return to register defaults after `global_reset`.

Simulation runs with two-state logic. Every register that is read is reset, and the
testbenches ignore outputs while reset is active.
