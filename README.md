# 10 Gigabit Ethernet read-out logic for a silicon pixel detector board

A prototype hybrid pixel detector built from 16 sensor modules produces
frames at a 1 kHz refresh rate. Shipping them to the data-acquisition server
in real time takes at least 4.8 Gbit/s per read-out chain. Each read-out board
holds a single FPGA that does all the networking in hardware:

- a TCP/UDP offload core (XTOE) drives a 10 Gbit/s Ethernet link;
- TCP carries the detector data reliably;
- UDP carries a small register-access protocol, used to configure the pixel
  ASIC and the trigger and to read the settings back;
- boards can be chained: each board merges its own traffic with the traffic of
  the board above it and forwards both towards the server.

This repository is the FPGA user logic that sits around the offload core on
one board:

- the TCP transmit path from the DDR3 data cache to the core;
- the UDP register path with its replies;
- the daisy-chain merger on the XGMII buses;
- the test logic used to measure bandwidth: a traffic generator, a payload
  checker and a throughput counter.

The vendor cores are outside the RTL. These are the offload core with its MAC,
the 10GBASE-R PCS/PMA, the DDR3 controller with its FIFO adapter, and the ASIC
readout. Their user-side signals are ports of the top module `readout_top`.

```
             80 MHz                     156.25 MHz
 DDR3 FIFO ──► async_fifo ──┐
                            ├─► toe_tx_framer ──► XTOE TCP transmit (TOE_WRITE/SOP/EOP/DATA)
 data_generator ────────────┘          (source chosen by register 0 bit 1)

 XTOE receive (TCP and UDP, told apart by a flag)
   ├─ TCP ─► data_checker, throughput_meter ──► registers 6, 7
   └─ UDP ─► udp_rbcp: RX_FIFO ► rbcp_parser ► dmac ◄─► reg_control (8 x 32 bit)
                               ack_request / packet_compose ► mux ► TX_FIFO ──► XTOE UDP transmit
                                                reg_control ──► BPIX GDAC/chain/array, trigger setting

 daisy_chain:  upstream PCS (up_txd/c) ─► Up_eth_fifo  ─┐
               this board's MAC (brd_txd/c) ─► Brd_eth_fifo ─┴► daisy_arbiter ─► Down_Txd/Txc
               Down_Rxd/Rxc ─► upstream PCS and this board's MAC (fan-out)
```

## Clocks and rates

There are two clock domains. Both resets are synchronous and active high.

| clock | frequency | what runs on it |
|---|---|---|
| `clk_user` | 80 MHz | DDR3 read side, write port of the clock-crossing FIFO |
| `clk_xtoe` | 156.25 MHz | everything else: XTOE user interface, XGMII buses, UDP path, registers, test logic |

The rates that matter:

- **Ethernet line rate.** One 64-bit word per 156.25 MHz clock is exactly
  10 Gbit/s.
- **DDR3 side.** The 80 MHz × 64-bit write side delivers at most 5.12 Gbit/s.
  That is above the 4.8 Gbit/s one chain needs, and below what the TCP side can
  drain.
- **Framer ceiling.** The TCP framer leaves one idle clock between 128-word
  frames, so its ceiling is 128/129 × 10 = 9.92 Gbit/s. In practice the offload
  core and the host limit TCP long before that, to about 6 Gbit/s.

## TCP transmit path

The offload core takes a frame as one unbroken burst:

- `TOE_WRITE` is high from the word with `TOE_TX_SOP` to the word with
  `TOE_TX_EOP`, with no gap;
- `TOE_TX_VALID_BYTES` marks the valid lanes;
- `TOE_TX_STR` is held low.

A burst must not stall halfway, so `toe_tx_framer` starts a frame only when
both of these hold:

- the source reports at least `FRAME_WORDS` (128) words waiting;
- the core does not signal `toe_tx_afull`.

It then reads the source on every clock for 128 clocks.

The outputs are registered, so `TOE_WRITE` with SOP appears two clocks after
the start condition. `frames_sent` counts completed frames.

There are two sources, selected by control register bit 1:

- **DDR3 cache (bit 1 = 0).** Data read from the DDR3 FIFO adapter enters
  `async_fifo`. This is a 512-word, Gray-pointer, dual-clock FIFO with
  first-word fall-through.
  - `ddr_rd_ready` is simply "not full", so the DDR3 side is held off when the
    TCP side is slower.
  - Its read-side fill level tells the framer when a whole frame has arrived.
    That level can read low while words are crossing the clock boundary, which
    only delays a frame; it never causes an underrun.
- **Generator (bit 1 = 1).** `data_generator` makes the bandwidth-test traffic.
  - Every frame carries the same payload: word *i* is `{i, ~i}` as two 32-bit
    halves.
  - Its rate is register 1: a 17-bit value *r*, giving *r*/65536 words per
    156.25 MHz clock, i.e. 0 to 10 Gbit/s. For example, 39322 is 6 Gbit/s.
  - A 16-bit phase accumulator adds *r* each clock. Each carry adds one word of
    credit, up to two frames' worth.
  - The framer treats the credit as a FIFO level and each read uses one word.
    The word index wraps every 128 words, so each frame starts at word 0.

## Bandwidth measurement

In the bandwidth test one board sends and a second board receives. On the
receiving board, TCP words from the core's receive bus (`toe_rx_valid` with
`toe_rx_udp` low) go to two blocks:

- **`data_checker`** compares each word with the generator pattern for its
  position in the frame. The position resets at SOP. It counts words and
  mismatches.
  - Control bit 2 clears both counters.
  - The error count is in the top half of status register 7.
- **`throughput_meter`** adds up the valid bytes of every TCP word.
  - Each window is 15625 clocks, i.e. 100 µs.
  - It latches the window total into `bytes_per_window` (register 6) and pulses
    `window_tick` for one clock.
  - The total is in bytes per 100 µs, so Gbit/s = bytes × 8 / 100000.

## Daisy chain

This is the least obvious part of the design.

XGMII has no flow control. A frame arriving from the upstream board, or from
this board's own MAC, must be taken at line rate or lost. Both streams share
one downstream link. The merger therefore buffers whole frames and sends them
out one at a time.

**Frame FIFOs (`eth_fifo`, one per input, 72 bits = `{TXC, TXD}`, 512 words).**

Storing frames:

- A word with the start character (0xFB, control) in lane 0 opens a frame.
- The word holding the terminate character (0xFD) closes it.
- Idle words between frames are not stored.

Publishing frames:

- The FIFO keeps three pointers: read, write and *commit*.
- Words are written at the write pointer. The commit pointer moves only when a
  terminate word is stored.
- The reader sees only words up to the commit pointer, and `frames` counts the
  complete frames held. A frame is therefore offered to the arbiter only once
  all of it is inside.
- This store-and-forward rule lets the arbiter send a frame without ever
  running dry in the middle of it.

Dropping frames:

- If the FIFO fills while a frame is arriving, the write pointer rewinds to the
  commit pointer. The rest of the frame is skipped up to its terminate, and
  `drops` counts one drop.
- A start inside an open frame (lost terminate) discards the partial frame and
  opens the new one.
- Either way the frames behind are intact. The TCP sender retransmits what was
  lost.
- The largest frame that can pass is therefore one FIFO depth, 512 words.

**Arbiter (`daisy_arbiter`, N = 2).**

- It polls the two FIFOs round robin, starting after the source it served last,
  and forwards one whole frame per grant.
- While forwarding it pops the granted FIFO every clock and registers each word
  onto `Down_Txd/Down_Txc`, adding one clock of latency.
- After the terminate word it sends idle words: one when the terminate word
  already holds at least four idle lanes, otherwise two. This keeps the
  inter-frame gap at 12 bytes or more.
- With both inputs busy, frames alternate strictly between upstream and local.
- Traffic from the server (`Down_Rxd/Rxc`) is passed combinationally to both
  the upstream board's PCS and this board's MAC. Each receiver drops frames not
  addressed to it.

Headroom: four boards sharing one link at 5 Gbit/s in total leave the arbiter
half its line rate spare. The FIFOs then only absorb the burst collisions.

## Register access over UDP

UDP and TCP packets arrive on the same receive bus of the offload core. They
are told apart by the UDP flag, and only UDP words enter `RX_FIFO`.

The UDP payload uses the SiTCP remote bus control protocol (RBCP). The payload
is packed most significant byte first into 64-bit words, and `valid_bytes[7]`
marks the first byte:

| byte | field | values |
|---|---|---|
| 0 | Ver/Type | 0xFF |
| 1 | CMD/Flag | 0x80 write, 0xC0 read; replies add 0x08 (ACK) and 0x01 (bus error) |
| 2 | ID | echoed in the reply |
| 3 | Length | bytes to write or read, 1 to 255 |
| 4–7 | Address | byte address, big-endian |
| 8… | Data | write data (write requests) / read data (read replies) |

The blocks, in order along the path:

1. **`rbcp_parser`** reads `RX_FIFO`.
   - A packet is accepted only if all of these hold: it starts with SOP,
     Ver/Type is 0xFF, the command is exactly write or read, Length is not
     zero, and a write carries data. Otherwise it is dropped up to its EOP and
     counted in `bad_pkts`.
   - It emits the command, then for a write the data bytes one by one.
   - The last byte is marked. If the packet ended before Length bytes, that
     byte is also marked *short*. Surplus bytes after Length are discarded.
2. **`dmac`** turns the command into byte-wide bus cycles on `reg_control`.
   - Writes take one clock per byte.
   - Reads take two clocks per byte, because the register bank's read data is
     registered.
   - A command whose address range leaves the 32-byte register space makes no
     bus access at all. Its data is consumed and the reply carries the
     bus-error flag. A short write also sets that flag.
3. **Replies.**
   - `ack_request` answers a write with one word: the request header with
     flag 0x88.
   - `packet_compose` answers a read with the header (flag 0xC8), followed by
     the bytes packed eight per word, with valid bytes on the last word.
4. **`udp_tx_mux`** merges the two reply streams into `TX_FIFO`. It keeps one
   source from SOP to EOP and alternates between them.
5. **UOE transmit port.** A reply starts leaving `TX_FIFO` for the core's UDP
   transmit port only when all of it is in the FIFO and the core's almost-full
   input is low. It then leaves as one burst.

UDP gives no delivery guarantee. The host therefore confirms a configuration by
reading the registers back.

**Register map** (`reg_control`, eight 32-bit registers, byte address 4·k,
byte 0 of a register is its most significant byte):

| k | name | use |
|---|---|---|
| 0 | CTRL | [0] generator enable, [1] source: 1 generator / 0 DDR3, [2] clear checker |
| 1 | GEN_RATE | [16:0] generator rate, words per clock × 65536 |
| 2 | GDAC | to the BPIX GDAC load (`bpix_gdac`) |
| 3 | CHAIN | to the BPIX chain load (`bpix_chain`) |
| 4 | ARRAY | to the BPIX array write (`bpix_array`) |
| 5 | TRIG | trigger setting (`trig_setting`) |
| 6 | THROUGHPUT | read only: received TCP bytes in the last 100 µs |
| 7 | STATUS | read only: {checker errors[15:0], upstream drops[7:0], board drops[7:0]} |

Notes:

- Writes to the read-only registers are ignored.
- Reads beyond register 7 return zero.
- A written byte takes effect on the next clock edge.
- The configuration outputs are in the 156.25 MHz domain. They are static
  settings, so the consumer synchronises them.

## Where this RTL departs from, or adds to, the published description

The published description gives the structure:

- the blocks, their names and their connections: the firmware blocks, the
  daisy-chain arbitration with its two 72-bit FIFOs, and the UDP parsing chain;
- the XTOE transmit timing;
- the 80 MHz and 156.25 MHz clocks;
- the eight-register bank;
- the 100 µs throughput sampling;
- the generator's repeated payload and its rate of about 6 Gbit/s.

Everything below is this design's own choice:

- the RBCP packet format, taken from the SiTCP protocol it refers to;
- all FIFO depths, and the 128-word TCP frame. The original firmware hands the
  offload core one burst per detector frame. The detector frame format is not
  published, so the DDR3 stream is cut into fixed bursts instead;
- the store-and-forward frame FIFO with drop-on-overflow;
- frame-granular round robin and the 12-byte gap rule;
- the register map and the generator rate encoding;
- the payload pattern, and the checker's comparison rule;
- the byte-wide register bus with its range check and bus-error reply;
- `toe_tx_afull`, standing in for the offload core's transmit-FIFO status.

Not built here:

- the offload core, MAC, PCS/PMA and transceivers;
- the DDR3 controller and its 8 GB cache;
- the clock generation and trigger handling ("fast control");
- the BPIX ASIC configuration and readout protocol, which is not described;
- the logic analyser used to sample the registers.

## Testbenches and how to run them

Each block has a self-checking testbench `tb/tb_<block>.sv`. Each one:

- compares the block against a model written independently of the block;
- prints `TB_RESULT checks=N failures=M`;
- stops itself with a watchdog.

Most run at reduced sizes (FIFOs of 16 to 64 words, frames of 8 to 16 words) to
keep them short. Run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_daisy_chain \
  -y rtl -y tb rtl/readout_pkg.sv tb/tb_daisy_chain.sv
./obj_dir/Vtb_daisy_chain
```

`tb_readout_top` runs the whole board at the default sizes: 128-word frames,
512-word FIFOs and the full 15625-clock window. It models the DDR3 FIFO, the
offload core (TCP frames it is given are looped back onto its receive bus, as
the receiving board would see them), a UDP host and both XGMII neighbours. The
test runs these steps in order:

1. Configure the board over UDP and read the registers back. Send one
   malformed packet.
2. Send four frames of DDR3 data through a period of `toe_tx_afull`, and check
   their order and framing. The checker must flag them, because they are not
   the generator pattern.
3. Switch to the generator at 6 Gbit/s. Check the payload, the frames per
   window and the throughput register. The run gives 73 frames and 75160 bytes
   per 100 µs window, i.e. 6.01 Gbit/s.
4. Fill the clock-crossing FIFO until the DDR3 side is held off, then drain it.
5. Run the daisy chain at 30 % load per input (no drops, every frame delivered
   in order), then at 95 % per input. At 95 % the frames that go missing must
   equal the drop counters.

Two more testbenches run the two measurements a board of this kind is judged
by:

- **`tb_linearity`** steps the generator over UDP from 1 to 10 Gbit/s and reads
  the throughput register at each step. It reads 1.00, 1.96, 2.94, 4.01, 5.00,
  6.00, 7.01, 8.00, 8.99 and 9.92 Gbit/s.
  - The counts come in whole frames, so each step is checked to within one
    frame (1024 bytes).
  - The top step is the framer ceiling of 128/129 × 10 Gbit/s.
- **`tb_daisy4`** chains four `daisy_chain` instances, as four boards in
  series. Their own traffic is 1.0, 1.5, 1.0 and 1.5 Gbit/s.
  - 4.98 Gbit/s of payload reaches the server.
  - Every frame arrives unchanged and in per-board order, with no drops.
  - Server data reaches every board.

`tb_readout_top` counts each of these mechanisms and fails if any never happened: UDP write,
UDP read, bad packet, DDR3 frames, generator frames, source switch, almost-full
stall, clock-crossing FIFO back-pressure, checker error detection, throughput
window, daisy grants to both inputs, daisy drop and receive fan-out. It runs in
about 10 seconds.

Verilator is a two-state simulator, so every register that is read is reset.

## Changing it

Top-level parameters:

- `FRAME_WORDS`: the TCP frame length. The generator and checker follow it.
- `CDC_DEPTH`: the clock-crossing FIFO depth. Must be a power of two, at least
  one frame.
- `ETH_DEPTH`: the daisy frame FIFOs. Must be a power of two; it is also the
  largest frame that can pass.
- `WINDOW_CYCLES`: the throughput window.

To add a register:

1. Raise `NREGS` in `readout_pkg`.
2. Widen `REG_RO_MASK`.
3. Wire the new entry in `readout_top`.

`dmac` range-checks against `4 × NREGS` bytes automatically.
