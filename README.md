# Waveform readout and remote access firmware for a three-channel PMT readout board

This is synthesizable SystemVerilog for the data path and the remote access
slaves of a Global Control Unit (GCU). A GCU is an underwater readout board
that serves three large photomultipliers of the JUNO detector. Each PMT
signal is digitised at 1 GS/s with 14 bits. The board then does three jobs
at once:

* it keeps the last 32 µs of every channel. When the back-end trigger system
  confirms an event, it cuts 1 µs of waveform per channel into packets. The
  DAQ server reads these packets over IPbus, a register-access protocol
  carried over UDP/Ethernet;
* it records every locally triggered waveform, with no confirmation needed,
  in a 2 GB DDR3 memory used as a ring. The server can empty the DDR3 on
  request, for example after a burst of triggers larger than the network can
  carry;
* it lets the server reach the board over the same network. The second FPGA
  (a Spartan-6) has an I2C master, for the EEPROM that holds the board's MAC
  address, and a virtual JTAG cable, for debugging and reprogramming the main
  FPGA (a Kintex-7).

The board is out of reach for the life of the experiment. So everything
(data, settings, firmware updates) goes through IPbus slaves. This code
contains those slaves and the data path behind them. It does not contain:

* the IPbus protocol engine and Ethernet MAC (a standard core from the IPbus
  suite);
* the FADCs;
* the DDR3 physical interface.

These parts are reached through ports of the top module `gcu_top`.

## Block diagram

```
                         Kintex-7, system clock 125 MHz                        | IPbus clock
 FADC lines ──┬──► trigger_generator ──► trig_req (to back end)                |
 3 ch x 8 x   │        │ local triggers                                        |
 14 bit /8 ns │        ▼                                                       |
              ├──► l1_cache (4000 lines/ch) ──► ipbus_daq funnel FIFO (8 KB) ──┼─► slave 1
              │        ▲ validated triggers (ext_trig, from back end)          |
              │                                                                |
              └──► l1_cache as DDR3 packager (2048 lines, self-triggered)      |
                       ──► ddr3_controller ──► app_* port (2 GB DDR3)          |
                             ▲ request/busy   └──► readout FIFO ───────────────┼─► slave 2 (ddr3_ipbus_daq)
                                                                               |
          settings ◄─ cdc_sync ◄───────────── trigger_manager ◄────────────────┼─  slave 0
                                                 ipbus_fabric ◄── ipb_in/ipb_out (IPbus master)

 Spartan-6, own IPbus clock:  ipbus_fabric ─► slave 0 i2c_ipbus   ──► SCL/SDA (MAC-address EEPROM)
                                           └► slave 1 vjtag_ipbus ──► TCK/TMS/TDI/TDO (Kintex-7 JTAG)
```

## Time, lines and timestamps

The FADCs deliver 1 sample per ns. The logic runs at 125 MHz and handles a
*line* of eight consecutive samples per clock, sample 0 being the earliest.
`trigger_generator` holds a 48-bit timestamp that counts lines, so its unit
is 8 ns. It can be loaded from the back-end link (`ts_load`,
`ts_load_value`) to align all boards. Everything downstream names waveforms
by the timestamp of their first line.

The local trigger fires on a rising threshold crossing: a sample at or above
the channel's threshold whose previous sample was below it. The previous
sample may be the last sample of the previous line. The request carries the
channel mask and the timestamp of the line holding the crossing. It is
issued one clock after that line. After a trigger the channel ignores
further crossings for 125 lines (one window), so one pulse gives one
request. Requests go:

* to the back end (`trig_req_*`);
* to the L1 cache, which uses them only in self-triggering mode;
* to the DDR3 packager, which always uses them.

## The event packet

Every readout unit is a packet of 16-bit words. The DAQ and the DDR3 use the
same format:

| word | content |
|------|---------|
| 0 | `0x805a` start marker |
| 1 | channel number 0..2 |
| 2 | packet size in units of 8 words: 1016 / 8 = 127 |
| 3 | trigger count (16 bit, cyclic, one per trigger) |
| 4 | firmware version (`0x0022` by default) |
| 5, 6, 7 | timestamp bits 47:32, 31:16, 15:0 |
| 8 .. 1007 | 1000 samples, 14 bits zero-extended to 16, earliest first |
| 1008 .. 1013 | `0x55aa 0x0123 0x4567 0x89ab 0xcdef 0xff00` |
| 1014 | GCU ID |
| 1015 | `0x0869` end marker |

This gives 1016 words, or 2032 bytes. The first sample is sample 0 of the
line named by the timestamp. `event_packager` builds the packet around any
waveform stream. The length is a parameter (`WAVE_LEN`).

## The L1 cache: windows cut from a running ring

`l1_cache` writes one 112-bit line per channel per clock into a ring of
`DEPTH` = 4000 lines, which is 32 µs. Triggers enter a 4-entry queue. The
source depends on the mode:

* external mode takes validated triggers (`ext_*`) only;
* self-triggering mode takes local triggers (`loc_*`) only.

For each trigger the cache produces one packet per channel in the mask
(masked further by the channel enables), in channel order. The start address
is the current write address minus the trigger's age (`ts_now - ts`). Lines
are read with one clock of latency and fed to the packager at one word per
clock.

The subtle part is that **the writer overtakes the reader**. The ring
advances one line per clock, but a packet consumes only one line per eight
clocks. While line *k* of a window is streamed, the writer has advanced
about `8 + 8k` lines. The last line (k = 124) therefore must not be
overwritten before it is read, which requires

    age_at_start  <=  DEPTH - 8 - 7*125 - SLACK  =  3101 lines  (24.8 µs)

`SLACK` (16 lines) covers stalls by the consumer. So a validated trigger must
reach the cache within about 25 µs of the event, not the full 32 µs. Older
triggers are not read: a corrupted waveform would be worse than a missing
one.

Each packet decision ends one of four ways, each counted:

| counter | cause |
|---------|-------|
| `pkt_count` | packet sent |
| `drop_late` | window too old (see above), or not yet written (age 0) |
| `drop_room` | the downstream FIFO has less than 1016 free words, so the packet is not started |
| `drop_queue` | a trigger arrived while the 4-entry queue was full |

Checking room before starting means a packet, once begun, is never cut or
stalled by the funnel FIFO. A lost event is always a whole packet.

## Funnel FIFO and the DAQ read loop

`ipbus_daq` takes the packets of all three channels, packs two words per
32-bit word (first word in bits 31:16) and writes them into `async_fifo`.
The FIFO has 2048 × 32 bits = 8192 bytes, room for four packets (8128
bytes). The IPbus side has two registers:

| offset | register |
|--------|----------|
| 0 | DATA: each read pops one 32-bit word; err when empty |
| 1 | OCCUPANCY: words held |

A DAQ client reads OCCUPANCY. It then reads DATA in one IPbus block read,
taking the occupancy or its own buffer size (up to 2048 words), whichever is
smaller. Smaller buffers need more round trips to empty the FIFO, so they move
less data at high trigger rates; `tb_gcu_rate` measures this. Packets are an even number of words, so they always start on a 32-bit
boundary, which an assertion checks.

## DDR3 ring, blocking readout and restart

A second `l1_cache` instance is the DDR3 packager. It always runs
self-triggered and has its own 2048-line (16 µs) ring, so it never disturbs
the L1 path. It can be switched off with a CTRL bit.

`ddr3_controller` packs eight words into a 128-bit line (first word in bits
15:0) and writes lines at consecutive addresses of a 2^27-line (2 GB) ring,
through a vendor-style user port:

* `app_en`/`app_cmd`/`app_addr`/`app_rdy`;
* `app_wdf_*` for write data;
* `app_rd_data(_valid)` for in-order read data.

A packet that does not fit in the ring is refused, and the packager counts
it in `drop_room`.

A readout request (a CTRL write in `ddr3_ipbus_daq`, carried across clocks
as a toggle) runs in four steps:

1. **drain**: let the packet being written finish, and flush its last line;
2. **read**: issue reads for every stored line, oldest first. The number of
   reads in flight never exceeds the free space of the 8 KB readout FIFO.
   Meanwhile `busy` is high and the packager sees no room, so new
   self-triggered packets are dropped and counted, not written;
3. **flush**: wait until the DAQ has emptied the readout FIFO;
4. **restart writing** on its own. The ring is empty again.

`ddr3_ipbus_daq` has three registers:

| offset | register |
|--------|----------|
| 0 | CTRL: write bit 0 = 1 to request |
| 1 | STATUS: bit 0 busy, bits 31:8 words ready |
| 2 | DATA: one 32-bit word per read; bits 31:0 of a line come first, so a word is {packet word n+1, packet word n} |

The DAQ loops on STATUS/DATA until busy is low and no words remain.

## Settings and address map

Each IPbus fabric decodes address bits 7:4 as the slave select and bits 3:0
as the register offset. A select with no slave answers err.

| Kintex-7 address | register |
|---|---|
| 0x00 | CTRL: bit 0 self-triggering mode, bits 3:1 channel enables, bit 4 DDR3 recording. Reset 0x1e: external mode, all on |
| 0x01..0x03 | threshold of channel 0..2 (14 bit, reset 8192) |
| 0x04 | GCU ID (goes into every trailer) |
| 0x05 | firmware version (read only) |
| 0x06 / 0x07 | timestamp bits 31:0 / 47:32 (read only, a snapshot for monitoring) |
| 0x10 / 0x11 | funnel FIFO DATA / OCCUPANCY |
| 0x20 / 0x21 / 0x22 | DDR3 CTRL / STATUS / DATA |

| Spartan-6 address | register |
|---|---|
| 0x00 | I2C CMD: bit 0 START, bit 1 STOP after the byte, bit 2 write byte `wdata[15:8]`, bit 3 read a byte, bit 4 level sent in the read's acknowledge slot (1 = NACK) |
| 0x01 | I2C STATUS: bit 0 busy, bit 1 NACK received, bits 15:8 byte read |
| 0x10 | vJTAG CTRL: write bits 5:0 = bits-1, bit 31 go; read bit 0 busy |
| 0x11 / 0x12 / 0x13 | vJTAG TMS / TDI / TDO vectors, bit 0 first |

A command written while the I2C or vJTAG engine is busy answers err and is
ignored. Writes to read-only registers answer err.

The settings live in the IPbus clock domain. They are treated as static
during a run and are re-timed by a two-flop stage (`cdc_sync`). Change them
only while no triggers are expected.

### I2C master

`i2c_ipbus` executes one byte per command: an optional (repeated) START,
then a write or read of 8 bits plus the acknowledge slot, then an optional
STOP. Each bit takes four phases of `QUARTER` = 78 IPbus clocks, which is
about 100 kHz at 31.25 MHz. Both lines are open drain (`*_oe` pulls low,
`*_i` reads the pin). A slave holding SCL low stretches the clock. A random
read of the EEPROM is seven commands:

1. START + write 0xA0;
2. write the offset;
3. START + write 0xA1;
4. then one read command per byte, with NACK and STOP on the last.

### Virtual JTAG

`vjtag_ipbus` plays one command of 1..32 bits in the style of Xilinx Virtual
Cable: a TMS vector, a TDI vector, and a TDO vector returned. For each bit:

* TMS and TDI change while TCK is low;
* TCK rises after `HALF` clocks, and TDO is sampled on that edge;
* TCK falls `HALF` clocks later.

A command takes `2*HALF*n` IPbus clocks. A server daemon splits the longer
shifts of a JTAG tool into such commands.

## Clock domains

| domain | blocks |
|--------|--------|
| `clk` (125 MHz) | trigger, caches, packers, DDR3 controller |
| `ipb_clk` | Kintex-7 IPbus fabric and slaves |
| `s6_ipb_clk` | Spartan-6 side |

Crossings happen in three ways:

* the two data FIFOs are Gray-pointer asynchronous FIFOs;
* the DDR3 request is a toggle through two flops, and `busy` comes back the
  same way;
* the settings go through `cdc_sync`.

The timestamp snapshot read over IPbus is sampled without synchronisation.
It is for monitoring only.

## What follows the published description and what is this design's own

Taken from the description of the board:

* the three-way split of the samples (L1 cache, DDR3, trigger);
* the 32 µs L1 cache;
* external mode with self-triggering selectable over IPbus;
* the 2^13-byte asynchronous funnel FIFO holding four packets, with its
  occupancy readable;
* the DAQ buffer size of up to 2048 32-bit words;
* the self-triggered 2 GB DDR3 ring, with writing blocked during a readout
  and restarting on its own;
* the packet format (header fields, fixed words, 1000 samples, size in units
  of 8 words, 8 ns timestamp);
* the I2C slave for the MAC EEPROM and the virtual JTAG slave in the
  Spartan-6.

Choices made here, where the description is silent:

* all register maps and address decoding;
* the trigger rule and its hold-off;
* the trigger queue and the three drop rules;
* the 24.8 µs age limit, which follows from the rule above;
* the DDR3 packager as a separate 16 µs ring;
* dropping on a full DDR3 ring;
* the word order inside 32-bit and 128-bit words;
* the most-significant-first timestamp word order;
* the I2C and JTAG command sets and bit rates;
* the clock-domain arrangement;
* the DAQ read policy in the testbenches, min(occupancy, buffer size) words per
  block, and the 31.25 MHz IPbus clock that caps the simulated bandwidth at
  62.5 MB/s.

Points to be aware of:

* the published example packet shows the size field as `0x0127`, but the
  size is defined as the packet length in units of 8 words. That is 127
  decimal, `0x007f`, and this design writes that;
* the board digitises each channel twice, with high- and low-gain FADCs.
  Only one 14-bit stream per channel is carried here;
* charge reconstruction in the Kintex-7 is not implemented.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. The testbench models are:

| model | stands for |
|-------|------------|
| `ipb_master_bfm` | an IPbus master, with `read`, `write` and `read_block` (non-incrementing) tasks |
| `ddr3_model` | DDR3 user port: sparse memory, random not-ready cycles, fixed read latency |
| `i2c_eeprom_model` | a 256-byte I2C EEPROM with clock stretching |

With Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
        rtl/gcu_pkg.sv tb/tb_gcu_top.sv --top-module tb_gcu_top -o sim
    ./obj_dir/sim

`tb_gcu_top` runs the whole board at its real sizes, with no parameter
overrides: 32 µs rings, 8 KB FIFO, 2 GB address space. It takes a few
seconds. It counts each mechanism as it happens and fails if any is never
seen:

* timestamp load and settings access;
* unmapped-address errors on both fabrics;
* threshold change, trigger request, validated readout in channel order;
* channel disable, self-triggering mode;
* FIFO occupancy, funnel-FIFO overflow (exactly four packets kept);
* late-trigger and queue-overflow drops;
* DDR3 recording, blocking during readout, readout, restart;
* I2C EEPROM write/read;
* JTAG shift.

All waveforms are compared sample by sample with the generating function.

`tb_gcu_rate` is a trigger-rate scan, also at full size. Validated
three-channel triggers arrive at a fixed rate. A DAQ process reads the funnel
FIFO over IPbus. It polls OCCUPANCY and then reads min(occupancy, buffer size)
words from DATA as one non-incrementing block. It checks every packet it
receives and reports the survival fraction and the bandwidth. The IPbus clock
is 31.25 MHz, and a block read returns 4 bytes every two clocks, so the ceiling
is 62.5 MB/s:

| trigger rate | DAQ buffer | packets kept | bandwidth |
|--------------|------------|--------------|-----------|
| 1 kHz | 2048 words | 9 of 9 | (idle most of the time) |
| 10 kHz | 2048 words | 60 of 60 | 61.0 MB/s |
| 20 kHz | 2048 words | 33 of 60 | 62.4 MB/s |
| 20 kHz | 64 words | 33 of 60 | 61.5 MB/s |

Every packet that is lost shows up in `l1_drop_room` or `l1_drop_queue`. The
testbench checks that packets received plus packets dropped equals three per
trigger. On a board the ceiling comes from the IPbus controller and the
network, not from this clock.

The block testbenches use short parameters where they help:

* `tb_async_fifo` uses a 16-entry FIFO;
* `tb_ddr3_controller` uses a 32-line memory to exercise wrap-around.

## Capacity at the default sizes

| workload | needed | provided |
|----------|--------|----------|
| 1 kHz per channel (design goal) | 3 × 2032 B per ms = 6.1 MB/s | one 3-channel trigger is packed in 24 µs |
| ~10 kHz, ~60 MB/s per board (measured with the full system) | 61 MB/s | the L1 cache produces up to 250 MB/s; `tb_gcu_rate` reads 61 MB/s with no loss through a 31.25 MHz IPbus port |
| four packets in the funnel | 8128 B | 8192 B |
| largest DAQ block read | 2048 words | OCCUPANCY up to 2048 |
| DDR3 ring | 2 GB | 2^27 × 16 B, about 1.05 M packets |
