# FLAG load generator: programmable-logic RTL

Industrial Ethernet devices (for example PROFINET field devices) have to keep working when the
network around them is busy. This design is the programmable-logic part of a load generator for
such tests. It has four Ethernet ports. It sends a chosen number of frames of a chosen size at a
chosen share of the line rate, checks what comes back, and timestamps every frame to 8 ns.

The main idea is simple. **Load is set by the idle gap between frames, not by timing software.**
Every frame of S bytes is followed by I_L idle byte times. At full load the gap is the Ethernet
minimum of 12 bytes. A frame that would use S + 12 byte times at 100 % load uses S + I_L byte
times at L percent, so

    I_L = 12 + (S + 12) * (100 - L) / L           (S counts preamble, SFD, frame and FCS)
    T   = F * (S + I_L) * 8 / R = (S + 12) * 8 * F / (L/100 * R)

Here F is the number of frames, R the line rate in bit/s, and T the run time. The generator
counts byte times in hardware, so the load and the run time are exact to the clock cycle. The
processor only has to write I_L and F and say "start".

Example: 1514-byte packets at 100 % load on 100 Mb/s give S = 1526 and I_L = 12. A frame then
starts every 1538 × 80 ns = 123.04 µs, and 33510 frames take 4.1231 s. At 50 % load,
I_L = 1550 and the frame period is 246.08 µs.

## Clock, bytes and port speed

- **One clock, one reset.** Everything runs on a single 125 MHz clock (8 ns), with a synchronous
  active-low reset `rst_n`. The 8 ns clock is also the timestamp resolution.
- **Byte streams.** Each byte stream is a `gmii_t {stb, dv, data}`:
  - `stb` marks the cycle that carries a byte time;
  - `dv` is high during a frame (preamble to FCS);
  - `data` is the byte.
- **Strobe rate.** At 1 Gb/s `stb` is high in every cycle. At 100 Mb/s a byte lasts 80 ns, so
  `stb` is high in every 10th cycle and the stream holds its value in between. Each port's speed
  is set separately.
- **What is assumed outside.** The PHY side of every port is such a byte stream in the system
  clock domain. Converting to the 4-bit double-data-rate RGMII pins, and crossing over from the
  PHY's receive clock, are left to the device I/O. They are not part of this RTL.

## Operating modes

A global `MODE` register selects the mode:

| Mode | Value | What happens |
|---|---|---|
| transparent | 0 (reset) | The monitor copies every frame of every port to Port L, the link to the processor. The filters are bypassed and nothing is generated. |
| switching | 1 | Port A and Port B are bridged, cut-through, with one cycle of delay. The monitor works with its filters. |
| scripting | 2 | The generators drive their ports, and the analysers count and tag the frames they receive. |

Two rules keep frames whole:

- Each direction of the A↔B bridge turns on or off only while its source is between frames, so a
  mode change never cuts a frame.
- The generator only starts in scripting mode, and `RUN` must be set.

## The port: generator, adaptor, analyser (`port_mgmt`)

### Generator (`frame_generator`)

On the rising edge of the global `RUN` bit, and only if `TR_CTRL` bit 0 is set, the generator
does the following:

1. Waits `START_DELAY` byte times.
2. Sends `NUMBER_OF_FRAMES` frames. Each frame is:
   - 7 × 0x55 and the SFD 0xD5;
   - the destination MAC, then the source MAC;
   - `HEADER_SIZE − 12` bytes of `HDR_AFTER_MAC` (2 for an Ethertype such as 0x8892, or 6 for a
     VLAN tag plus Ethertype);
   - `PAYLOAD_SIZE` payload bytes (0, 1, 2, … in each frame);
   - the CRC-32 FCS.
3. Leaves `INTERFRAME_GAP` idle byte times after every frame.

`TR_STAT` reads 0 (Disable), 1 (Transmitting) or 2 (Done). There are two ways to stop early:

- Clearing `RUN` (the stop command) stops the generator at the next frame boundary.
- Writing `TR_CTRL` aborts at once and cuts a frame. It is meant to be written between runs.

### Adaptor (`rgmii_adaptor`)

The adaptor makes the port's byte strobe and registers each direction once. It also timestamps
the SFD:

- A transmitted frame is stamped in the cycle its SFD leaves.
- A received frame is stamped with the time its SFD was at the pins, after subtracting the
  adaptor's own buffering delay.

With a direct cable loop, the receive timestamp of a frame equals its transmit timestamp.

### Analyser (`frame_analyser`)

The analyser receives every frame. A frame **matches** when all four of these hold:

- its first `HEADER_SIZE` bytes equal the programmed destination MAC, source MAC and
  `HDR_AFTER_MAC`;
- the four bytes starting `PAT_OFFSET` bytes after the SFD equal `PAT_VALUE` in the bits set in
  `PAT_MASK`. This reaches into the payload, up to the application layer. The first byte is in
  bits 31..24, and a mask of 0 turns the check off;
- its length is `HEADER_SIZE + PAYLOAD_SIZE + 4`;
- its CRC is correct.

Counting works like this:

- It counts only while receiving, between the start of a run and Hold. The counters are
  `NUMBER_OF_RECV_OK` and `NUMBER_OF_RECV_NOK`.
- It keeps the timestamps of the first and the last counted frame.
- It goes to Hold (`TR_STAT` = 2) after `FRAMES_EXP` frames or after `FRAMES_EXP_OK` matches,
  whichever comes first. A limit of 0 is ignored.
- With tagging on (`TR_CTRL` bit 1), every mismatching frame gets `ERROR_CODE` attached. The code
  shows up in the frame's trailer on Port L.

## Monitor and Port L (`monitor`)

The monitor is how the processor sees traffic. Each port has two parts:

- **Filter (`monitor_filter`).** It watches either the port's receive stream or its transmit
  stream. It can compare the destination MAC, the source MAC and the Ethertype; a VLAN tag is
  skipped when looking for the Ethertype.
- **Buffer (`frame_buffer`).** It holds exactly one frame of up to 2048 bytes.

Frames move through it like this:

- A frame that passes the filter is stored only if its buffer is empty when the frame starts.
- Otherwise the frame is lost and the port's `DROPS` counter goes up. With four one-frame
  buffers the monitor cannot keep up with full-rate traffic on several ports. This is expected,
  and `DROPS` makes it visible.
- The output arbiter (`output_arbiter`) empties the buffers round robin onto Port L at 1 Gb/s.

**Trailer.** The arbiter adds a trailer when the port's tag bit is set or the analyser attached
an error code. It removes the stored FCS, appends two bytes `{port number, code}` (A = 0 … D = 3,
code 0 when untagged) and sends a new FCS. Port L therefore always carries valid Ethernet frames
that say where they came from and why they were marked.

## Load-gap unit (`load_gap_calc`)

Write `LOAD` (percent) and `FRAME_SIZE` (S), then write `CALC`. Exactly 33 cycles later,
`LOAD_GAP` holds I_L. It is computed with a serial divider and rounded to the nearest byte. A
load of 0 or above 100 sets the error bit. Software may also compute I_L itself and write it
straight to `INTERFRAME_GAP`.

## Register map

The processor reaches all registers over the On-Chip Bus (`ocb`):

- A write is a one-cycle `ocb_wr` with address and data.
- A read is a one-cycle `ocb_rd`. `ocb_rdata` follows with `ocb_rvalid` one cycle later.
- Unmapped addresses read 0.

| Block | Base |
|---|---|
| global | 0x4000_0000 |
| monitor | 0x4001_0000 (port p at +p·0x40) |
| generator TXA, TXB, TXC, TXD | 0x4003_0000, 0x4004_0000, 0x4005_0000, 0x4006_0000 |
| analyser RXA … RXD | generator base + 0x4000 |

Generator and analyser registers (offset from their base):

| Offset | Register | Gen | Ana | Offset | Register | Gen | Ana |
|---|---|---|---|---|---|---|---|
| 0x2800 | TR_CTRL | ✓ | ✓ | 0x2830 | PAYLOAD_SIZE | ✓ | ✓ |
| 0x2804 | TR_STAT (read) | ✓ | ✓ | 0x2834 | FRAMES_SENT (read) | ✓ | |
| 0x2808 | START_DELAY (bytes) | ✓ | | 0x2840 | FRAMES_EXP | | ✓ |
| 0x280C | INTERFRAME_GAP (bytes) | ✓ | | 0x2844 | FRAMES_EXP_OK | | ✓ |
| 0x2810 | NUMBER_OF_FRAMES | ✓ | | 0x2848 / 0x284C | RECV_OK / RECV_NOK (read) | | ✓ |
| 0x2814 | HEADER_SIZE | ✓ | ✓ | 0x2850 | ERROR_CODE | | ✓ |
| 0x2818 / 0x281C | ETHDST hi (bytes 0-1) / lo (2-5) | ✓ | ✓ | 0x2854 / 0x2858 | FIRST_TS lo / hi (read) | | ✓ |
| 0x2820 / 0x2824 | ETHSRC hi / lo | ✓ | ✓ | 0x285C / 0x2860 | LAST_TS lo / hi (read) | | ✓ |
| 0x2828 / 0x282C | HDR_AFTER_MAC hi (bytes 0-1) / lo (2-5) | ✓ | ✓ | 0x2864 | PAT_OFFSET | | ✓ |
| | | | | 0x2868 / 0x286C | PAT_VALUE / PAT_MASK | | ✓ |

Global registers:

| Offset | Register | Meaning |
|---|---|---|
| 0x00 | MODE | 0, 1 or 2, as in the mode table |
| 0x04 | RUN | execution phase; the stop command clears it |
| 0x08 | SPEED | one bit per port, 1 = 100 Mb/s |
| 0x0C / 0x10 | TIME | 64-bit ns time base (read) |
| 0x20 | LOAD | |
| 0x24 | FRAME_SIZE | |
| 0x28 | CALC | write: start; read: {error, done, busy} |
| 0x2C | LOAD_GAP | I_L result |

Monitor registers (per port, at +p·0x40):

| Offset | Register | Meaning |
|---|---|---|
| 0x00 | CTRL | [0] dst, [1] src, [2] type compare, [3] port tag, [4] watch transmit |
| 0x04 / 0x08 | DST | |
| 0x0C / 0x10 | SRC | |
| 0x14 | TYPE | |
| 0x18 | DROPS | lost-frame count (read) |

### A run, as a script would do it

This example sends F frames of S = 1526 bytes at 50 % load from Port A, looped back into Port C:

1. Write `MODE` = 2 and `SPEED` = 0b0101 (A and C at 100 Mb/s).
2. Write `LOAD` = 50, `FRAME_SIZE` = 1526 and `CALC`. Poll `CALC` until done, then read
   `LOAD_GAP` (1550).
3. RXC: write the MACs, `HDR_AFTER_MAC` = 0x8892, `HEADER_SIZE` = 14, `PAYLOAD_SIZE` = 1500,
   `FRAMES_EXP` = F and `TR_CTRL` = 1.
4. TXA: write the same header fields, `INTERFRAME_GAP` = 1550, `NUMBER_OF_FRAMES` = F and
   `TR_CTRL` = 1.
5. Write `RUN` = 1. Poll RXC `TR_STAT` until bit 1 is set (Hold), then write `RUN` = 0.
6. Read `RECV_OK`, `RECV_NOK` and the timestamps.

## Top level (`flag_top`)

The top contains the bus decoder, the global registers, four port blocks, the stream switch and
the monitor. Its ports are:

- the bus;
- four PHY byte streams in each direction;
- the per-port timestamps and their strobes;
- the `TR_STAT` states of all generators and analysers;
- the Port L output stream.

Parameters are `NUM_PORTS` = 4 and `MON_DEPTH` = 2048 bytes per monitor buffer. Shared types and
constants are in `flag_pkg`.

The following are not in this RTL:

- the processor;
- the script interpreter, command-line tool and web front end that produce the register writes;
- the PHYs;
- the direction from the processor back through Port L;
- the unspecified "function blocks" of the platform.

## How far it is verified

Every module has a self-checking testbench in `tb/`, named `tb_<module>`. Each one prints
`TB_RESULT checks=… failures=…`. The reference frames and CRC come from `tb/tb_eth_pkg.sv`,
whose CRC is written independently of the RTL's.

`tb_flag_top` runs the whole design at its default size. It drives the bus like the processor
does, and checks and counts each of these mechanisms:

- transparent copying to Port L;
- the A↔B bridge;
- the load-gap unit (1550 and 12);
- generation and analysis through a cable loop;
- analyser Hold;
- the exact 100 Mb/s frame periods of 123.04 µs (100 %) and 246.08 µs (50 %) for S = 1526;
- equal transmit and receive timestamps;
- monitor buffer overrun with `DROPS`;
- a filter drop;
- both trailer kinds;
- the stop command ending a run without cutting a frame.

`tb_workloads` replays the measured load runs on the full-size top, at 100 Mb/s with
S = 1526. It programs the run over the bus, takes I_L from the load-gap unit and checks each
of the following to the cycle:

- every frame period;
- the analyser's first-to-last timestamp span;
- the time until the generator reports Done.

It runs two loads:

- **100 % load, 624 frames.** This is the full length of the oscilloscope measurement. The
  first-to-last frame span is 623 × 123.04 µs = 76.65392 ms; the platform measured 0.076653 s.
- **50 % load, the first 200 of 31702 frames.** I_L is 1550 and the frame period 246.08 µs.

The 33510- and 31702-frame runs differ from these only in the frame count. At 15380 and 30760
clock cycles per frame, simulating them in full would take too long.

Simulate, for example:

    verilator --binary --timing -Irtl -Itb rtl/flag_pkg.sv tb/tb_eth_pkg.sv tb/tb_flag_top.sv --top-module tb_flag_top
    ./obj_dir/Vtb_flag_top

## Where this design departs from, or goes beyond, the platform description

- **Clock.** The platform text gives a 125 MHz clock, but one script example declares a 20 ns
  clock cycle. This design uses 125 MHz.
- **Done value.** The example script waits for a status "bit 2" using the mask 0x2. This design
  follows the mask: Done and Hold read as 2.
- **Register offsets.** Only the offsets of `TR_CTRL` … `HEADER_SIZE` and the port bases are
  known. All other offsets, the global and monitor bases, and the bus handshake are this design's
  choices.
- **Analyser pattern.** Deep matching is described only in words. The single masked 4-byte
  pattern at a programmable offset, and its three registers, are this design's way of providing
  it.
- **Monitor details.** The monitor's register layout, its choice of receive or transmit stream,
  the trailer format, round-robin service, the 2048-byte buffer size and the `DROPS` counters
  are this design's own.
- **Payload.** The generator sends an incrementing payload. The platform builds its frames in
  software, so any payload could be used there.
- **Transparent mode.** Transparent mode copies the traffic of all ports to Port L. It does not
  also forward frames between the test ports.
- **Error-code trailer.** The trailer is added to the copies sent to Port L. Frames forwarded by
  the A↔B bridge are passed on unchanged.
- **Changing frames during a run.** There is no mechanism that rewrites the next frame's data from
  registers during a run. The generator reads its header registers while it sends, so they should
  only be written between runs.
- **Switching.** Switching bridges only A and B. Cut-through forwarding assumes both ports run at
  the same speed.
- **Port L multiplexer.** The platform's block diagram shows a multiplexer in front of Port L that
  can also take the switch's stream. No rule for selecting it is described, so Port L always
  carries the monitor output. The timestamps are top-level outputs; they are not sent over
  Port L.
- **Stop and counting.** The stop command also stops the analysers counting, so a frame still on
  the wire at that moment is not counted.
