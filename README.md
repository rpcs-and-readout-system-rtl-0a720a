# Front-end FPGA for the RPC readout of the SHiP muon identification system

The muon identification system of the SHiP Scattering and Neutrino Detector
uses Resistive Plate Chambers read out by copper strips about 1 cm apart.
The strips are read by front-end boards, 38 per tracking plane. Each board
takes 16 strips. Two analog front-end ASICs on the board amplify and
discriminate the strip signals. An FPGA then turns the discriminated pulses
into data.

SHiP reads its detectors without a hardware trigger. Every hit during a
spill of about one second is timestamped and sent out. So the board FPGA has
to do the following:

- find the hits in 16 asynchronous digital inputs;
- drop the cycles in which nothing happened (zero suppression);
- label each hit with the time it arrived;
- buffer the hits and send them over one serial link to a concentrator.

The same link, in the other direction, brings two kinds of traffic. Fast
commands act at once: *trigger* and *clear*. Slow-control requests
configure the board. A trigger mode is also provided for system tests such
as cosmic-ray runs. In that mode, only hits inside a window opened by a
trigger command are kept.

This repository gives synthesizable SystemVerilog for that FPGA. The public
description of the design goes no further than a block diagram and one
paragraph. The four blocks, the signals between them and what each block
does come from that description. Everything below the block level is this
design's own: the forming rules, word and packet formats, character
assignments, register map, buffer depth and line timing. The last section
lists which choices are which.

## Blocks and the signals between them

```
                 +------------------------------- FASTOR ---------------------+
                 |                                                            v
 in_hits[15:0] +-+----------+  empty, Data[31:0]                       +-----------+
 ------------->| data_block |------------------------------------------>| tx_block  |--> tx_serial
 (from ASICs)  |            |<------------------------------------------|           |
               +------------+  en_rd                                    +-----------+
                  ^   ^   ^                                           SC_tx,DTS | ^ ACK
     configuration|   |   | trigger                                          v  |
                  |   |   |                                             +-----------+
                  +---)---)-----------------------------------------------| sc_block  |
                      |   |                                             +-----------+
                clear |   |                                        en_SC, SC_rx ^
                      |   |                                             +-----------+
                      +---+---------------------------------------------| rx_block  |<-- rx_serial
                                                                        +-----------+
```

| signal        | from → to     | meaning in this design                                                |
|---------------|---------------|-----------------------------------------------------------------------|
| FASTOR        | data → tx     | registered OR of the hits formed this cycle                           |
| empty, Data   | data → tx     | head of the hit buffer (first-word fall-through FIFO)                 |
| en_rd         | tx → data     | one-cycle pop, given when the TX Block starts a data packet           |
| configuration | sc → data     | mask, mode, trigger window, dead time (`fe_cfg_t`)                    |
| trigger       | rx → data     | one-cycle pulse from the trigger fast command                         |
| clear         | rx → data     | one-cycle pulse from the clear fast command                           |
| en_SC, SC_rx  | rx → sc       | a complete slow-control request and its strobe                        |
| SC_tx, DTS    | sc → tx       | a reply and "data to send", held until acknowledged                   |
| ACK           | tx → sc       | one-cycle pulse when the TX Block takes the reply                     |

The top module is `fe_fpga`. It wires the four blocks and nothing else.
Its ports are:

- `clk`, `rst_n`: the clock and an asynchronous, active-low reset;
- the 16 ASIC outputs;
- the two serial lines;
- four status outputs, `lost_words`, `rx_locked`, `rx_errors` and
  `sc_dropped`, which the published diagram does not show.

There is one clock, and it is also the bit rate of both serial lines: one
bit per cycle, so one 10-bit code group every 10 cycles. A real board would
run the serializer from a faster clock or a transceiver. Here the rest of
the logic does not depend on that, only the cycle counts below do.

## From a pulse to a stored word (`data_block`)

The ASIC outputs are asynchronous levels, and a strip can stay above
threshold for several clock cycles. Each channel goes through the following
steps:

1. **Synchronizer**: two flip-flops, and a third that keeps the previous
   value.
2. **Leading-edge detector**: one pulse gives one hit, however long it lasts.
3. **Forming**, driven by the configuration:
   - a masked channel gives nothing;
   - a channel that has fired ignores new edges for `dead_time` cycles. An
     edge is accepted again at the earliest `dead_time + 1` cycles after
     the last accepted one.
4. **Zero suppression**: a word is written only in a cycle in which at least
   one channel has a formed hit. Hits that arrive in the same cycle share one
   word.
5. **Word**: `{timestamp[15:0], hits[15:0]}`. The timestamp is a
   free-running count of clock cycles since reset or since the last *clear*.
6. **Mode**:
   - triggerless (the default): every word is stored;
   - trigger mode: a *trigger* loads a window counter with `trig_win`, and
     words are stored only while that counter is non-zero.
7. **Buffer**: a 64-word FIFO (`FIFO_DEPTH`). A word that finds the buffer
   full is dropped and counted in `lost_words`. Nothing already stored is
   ever overwritten.

Timing: a rising edge driven just after clock edge *k* reaches the formed
register at edge *k+3*. At that edge FASTOR rises, and the word is written
at edge *k+4* with the timestamp value of edge *k+3*.

*Clear* does four things in one cycle: it zeroes the timestamp, empties the
buffer, closes the trigger window and resets the dead-time counters.

The trigger window opens when the trigger arrives, so it keeps hits that
come after the trigger. The design has no latency pipeline that would keep
hits from before it. For cosmic-ray tests with an external trigger, the
cable delay must let the hits arrive after the trigger command.

## The link: characters, packets and priorities

Both directions use the standard 8b/10b code (`enc8b10b`, `dec8b10b`). It
guarantees DC balance, bounded run lengths and a comma (K28.5) that marks
the group boundary. Code groups are written `{a,b,c,d,e,i,f,g,h,j}`, with
bit *a* in bit 9 and sent first. The encoder keeps no state. Its caller
holds the running disparity and feeds it back.

| character | byte | direction   | meaning                                          |
|-----------|------|-------------|--------------------------------------------------|
| K28.5     | BC   | both        | idle / comma, used for alignment                 |
| K28.6     | DC   | FPGA → conc | FASTOR notice (single character)                 |
| K27.7     | FB   | FPGA → conc | start of a data packet                           |
| K28.0     | 1C   | both        | start of a slow-control request or reply         |
| K29.7     | FD   | both        | end of packet                                    |
| K28.2     | 5C   | conc → FPGA | fast command *trigger* (single character)        |
| K28.3     | 7C   | conc → FPGA | fast command *clear* (single character)          |

Packets:

- data: `K27.7, ts[15:8], ts[7:0], hits[15:8], hits[7:0], K29.7`
  (6 groups, 60 cycles);
- slow control: `K28.0, cmd, addr, data[15:8], data[7:0], K29.7`
  (6 groups), with `cmd` 0x01 for write and 0x02 for read.

### Scheduling in `tx_block`

On the last bit of every group, the TX Block picks the next character. A
packet that has started always runs to its end. Between packets the order of
priority is:

1. a FASTOR notice, if FASTOR has been high since the last notice. A notice
   is never sent twice in a row, so a FASTOR held high cannot block the
   packets below;
2. the slow-control reply, if DTS is high. ACK pulses as it is taken;
3. the oldest data word, if the buffer is not empty. en_rd pulses as it is
   taken;
4. otherwise a K28.5 comma.

After reset the line sends commas at once. The receiver can therefore lock
before any data flows.

FASTOR notices waiting in the same period merge into one. A notice tells the
concentrator that a hit occurred in the last packet time. It does not say
which hit.

### Receiving in `rx_block`

A 10-bit window slides over the incoming bits. When the window holds a K28.5
group (either disparity), it sets the group boundary and the running
disparity, and `locked` rises. A comma at another bit position moves the
boundary; this is how the block recovers from a bit slip. Every tenth cycle,
the window is decoded as one group. The decoded characters are handled as
follows:

- *Trigger* and *clear* act at once, even in the middle of a slow-control
  packet. Each gives a one-cycle pulse on the clock edge after the edge
  that samples the last bit of its group.
- A slow-control packet is passed on only when all four bytes have arrived
  and are followed by K29.7.
- The packet in progress is dropped, and `rx_errors` counted, on any of:
  - a code error or a disparity error;
  - a data byte outside a packet's four;
  - an unexpected control character;
  - a new K28.0 arriving before the old packet ended.

## Slow control (`sc_block`)

| address | register  | bits used | reset | meaning                               |
|---------|-----------|-----------|-------|---------------------------------------|
| 0x00    | mask      | 15:0      | 0x0000| 1 = channel ignored                   |
| 0x01    | control   | 0         | 0     | 1 = trigger mode, 0 = triggerless     |
| 0x02    | trig_win  | 7:0       | 16    | trigger window, clock cycles          |
| 0x03    | dead_time | 7:0       | 4     | per-channel dead time, clock cycles   |

Every request gets a reply. The reply carries the same command and address,
and the register's content after the request, so a write is echoed as a
confirmation. Unused bits read as zero. An unknown address or command
changes nothing and is answered with data 0xFFFF.

The reply waits on SC_tx with DTS high until the TX Block acknowledges it.
While it waits, SC_tx does not change; an assertion in `sc_block` checks
this. A request that arrives while a reply is still waiting is dropped and
counted in `sc_dropped`. The concentrator should wait for each reply before
sending the next request.

## Rates and sizes

The board has 16 channels, and one `fe_fpga` serves one board. A tracking
plane of 38 boards therefore needs 38 instances.

The sustained rate is set by the link. A data packet occupies the line for
60 clock cycles, so the design ships at most `f_clk / 60` words per second.
Each word holds all hits of one clock cycle.

A worked example for the expected 200 Hz/cm² charged-particle rate:

- 16 strips at 1.0625 cm pitch, taking the 1.9 m strip length, cover about
  3200 cm²;
- at 200 Hz/cm² that gives about 0.65 M hits/s per board;
- so the link needs `f_clk ≥ 39 MHz`, or about 45 MHz if each word also
  brings a FASTOR notice.

No clock frequency is published for this front end.

The 64-word buffer absorbs bursts; it does not hold a spill. The 16-bit
timestamp wraps every 65536 cycles, so the receiving side has to count
wraps during a spill. The width is set in `fe_pkg` (`TS_W`). It is tied to
the 32-bit word and to the 4-byte data packet, so changing it also means
changing the packet in `tx_block` and its testbench.

## What follows the published description, and what does not

Taken from the description:

- the four blocks and their roles;
- the names and roles of the signals in the table above;
- 16 input channels per board;
- acquisition, forming according to user configuration, zero suppression,
  timestamping and buffering until transmission;
- triggerless operation, plus a trigger mode for tests;
- packet priorities;
- 8b/10b encoding and serialization;
- decoding of received data;
- trigger and clear fast commands;
- a separate slow-control block that configures the Data Block.

This design's own choices:

- **Clock and line rate:** one clock, one bit per clock on both lines, no
  clock recovery on the receive line.
- **Forming:** edge detection, channel mask and dead time.
- **Formats:** the word format, the 16-bit timestamp, and all character
  assignments and packet formats.
- **Priorities:** the order FASTOR > slow control > data, non-preemptive.
- **Trigger mode:** the window semantics.
- **Clear:** its exact effect.
- **Buffer:** the 64-word depth and the drop-and-count overflow policy.
- **Slow control:** the register map, the reply rule, and the DTS/ACK
  direction: DTS is the request from the SC Block, ACK the answer from the
  TX Block.
- **Additions:** the status outputs.

Not built:

- the analog ASICs, whose 16 outputs are the `in_hits` port;
- the concentrator and its optical link (modelled only in the top-level
  testbench);
- the DAQ host.

Lint notes. Verilator reports `SYNCASYNCNET` on `rst_n`, because the reset
is used asynchronously in the flip-flops and synchronously in the
assertions' `disable iff`; this is harmless. Linted on its own, the package
also gives `UNUSEDPARAM`.

## Files

- `rtl/fe_pkg.sv`: shared widths, characters, register addresses,
  `sc_pkt_t`, `fe_cfg_t` and the reset configuration.
- `rtl/fe_fpga.sv`: the top.
- `rtl/data_block.sv`, `rtl/sync_fifo.sv`: acquisition and the hit buffer.
- `rtl/tx_block.sv`, `rtl/enc8b10b.sv`: scheduler, encoder and serializer.
- `rtl/rx_block.sv`, `rtl/dec8b10b.sv`: aligner, decoder and command
  handling.
- `rtl/sc_block.sv`: the registers.
- `tb/tb_<module>.sv`: one self-checking testbench per module.

Parameters: `FIFO_DEPTH` on `fe_fpga`/`data_block` (default 64, a power of
two), and `N_CH`/`TS_W` in the package.

## Simulation

Each testbench ends by printing `TB_RESULT checks=N failures=M` and has a
watchdog. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/fe_pkg.sv \
    tb/tb_fe_fpga.sv --top-module tb_fe_fpga -o sim
./obj_dir/sim
```

Replace `fe_fpga` with any module name for the block tests.

- `tb_enc8b10b`: published code groups, plus properties over all 268
  characters under both disparities (weight, disparity, distinctness). Also
  checks, over a 20 000-character random stream, the running digital sum
  and a run length of at most 5.
- `tb_dec8b10b`: published code groups, and a round trip of every character
  through the encoder. Also checks that code and disparity errors are
  flagged.
- `tb_data_block`: a cycle-exact reference model of the timestamps. Covers
  masks, zero suppression, long pulses, dead time, trigger window, overflow
  count and clear.
- `tb_tx_block`: decodes the line. Covers packet contents and order,
  back-to-back packets 60 cycles apart, priority, FASTOR merging and the
  FASTOR starvation guard.
- `tb_rx_block`: a random bit offset before the first comma. Covers fast
  commands (including one inside a packet), strobe timing, three kinds of
  bad packet and a bit slip.
- `tb_sc_block`: random writes and reads, random ACK delays, the unknown
  address and command, and dropping while busy.
- `tb_fe_fpga`: the whole board at default parameters, with a model of the
  concentrator on both lines. It configures the board, runs triggerless
  acquisition, dead time, a reply overtaking queued data, clear, trigger
  mode and an overflow burst. It checks every received word against the
  pulse that made it, and that each of these mechanisms happened at least
  once. It runs in well under a second.
