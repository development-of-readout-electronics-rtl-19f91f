# Timepix4 readout firmware: 160 Gb/s in, 40 Gb/s out, a SODIMM to make up the difference

A Timepix4 pixel chip used as a neutron imaging detector at a pulsed
spallation source does not produce data at a steady rate. The source fires 25
times a second. Each pulse lasts from a few milliseconds to a few tens of
milliseconds, and while the neutron flux peaks the chip can emit hits faster
than any single network link can carry them. The chip has 16 serial data
links ("GWT" links, 10.24 Gb/s each at most, 160 Gb/s in all). The readout
board has one 40 Gb/s QSFP+ port toward the data-acquisition computer.

This firmware bridges the two rates with the board's DDR4 SODIMM. While
the output keeps up, data goes straight through. When it does not, the excess
is parked in the SODIMM, which acts as a large first-in first-out store (up
to 32 GB). Between pulses it is read back out at the full output rate.
Order is preserved throughout, so the computer sees each link's words in the
order the chip sent them.

The RTL in `rtl/` covers everything between the transceivers and the
Ethernet MACs:

- the link decoders;
- the clock-domain crossing;
- the merge of the 16 links;
- the overflow buffer controller with its SODIMM port;
- two UDP/IP framers (40G QSFP+ and 10G SFP+);
- a T0 time-stamper;
- the processor-facing control registers;
- a serial slow-control master for the chip.

The transceivers, the memory controller, the MACs and the processor are
vendor parts. Their interfaces are brought out as ports of the top module
`tpx4_readout_top`.

```
 GWT link 0..7 (TOP) ─► gwt_decoder ─► async_fifo ─┐
                         (link clock)   (CDC)      ├─► axis_mux8 ─┐ up to 4 words/cycle
 GWT link 8..15 (BOT) ─► gwt_decoder ─► async_fifo ─┐             │
                                                   ├─► axis_mux8 ─┤
                                                                  ▼
                                        ┌──────── buffer_controller ────────┐
                                        │ packer ─► router ─► output FIFO   │◄─► SODIMM ring
                                        │            └─ spill ─► ring ─┘    │    (ddr_* port)
                                        └──────────────┬────────────────────┘
                                                       │ up to 2 words/cycle
                                     out_sel ─► udp_tx (40G) / udp_tx (10G) ─► MAC
 processor ─ AXI4-Lite ─► control_regs (config, status)      t0_in ─► t0_tdc
 processor ─ AXI4-Lite ─► slow_control ─► sc_clk/sc_cs_n/sc_dout/sc_din ─► chip
```

## Rates and widths

Everything after the channel FIFOs runs in one system clock `clk`. The
figures below assume 312.5 MHz. That frequency is a choice of this design;
nothing in the RTL depends on it except the throughput. A word is always
64 bits, which is one Timepix4 hit packet.

| Point | Width per cycle | At 312.5 MHz | Needed |
|---|---|---|---|
| One GWT link (link clock) | 1 word per 66-bit block | 9.93 Gb/s payload at 10.24 Gb/s line rate | |
| One mux output (8 links) | up to `IN_LANES` = 4 words | 80 Gb/s | 8 × 9.93 = 79.4 Gb/s |
| Buffer controller input | 2 × 4 words | 160 Gb/s | 158.9 Gb/s |
| Buffer controller output and UDP core | up to `OUT_LANES` = 2 words (128 bit) | 40 Gb/s | QSFP+ 40 Gb/s |
| SODIMM command port | 1 line of 512 bits | 160 Gb/s of commands | DDR4 itself: 19.2 GB/s = 153.6 Gb/s |

The limiting factor when spilling is the memory, not the logic. While the
ring holds data, every word is written and later read, so the SODIMM must
carry input rate + 40 Gb/s:

- With all 16 links at 5.12 Gb/s (80 Gb/s), the configuration that runs
  error-free on the real board, this is 119 Gb/s. That fits.
- With all 16 links at 10.24 Gb/s it is 199 Gb/s, which does not fit. Long
  pulses at the full chip rate back-pressure the links, and the channel FIFOs
  eventually drop words (each drop is counted).

Capacity is not the problem. Forty Gb/s of excess for 20 ms is 100 MB,
against a 32 GB ring.

## Link decoding (`gwt_decoder`)

Each GWT link arrives from its transceiver as 66-bit blocks: a 2-bit sync
header and a 64-bit scrambled payload. The block boundary is unknown after
power-up. The decoder runs in the link's own receive clock and works as
follows:

1. **Block lock.** While unlocked, the decoder inspects the sync header of
   each block. A legal header is `01` (data) or `10` (control). On an illegal
   one it pulses `slip`, which makes the transceiver's gearbox shift by one
   bit. It then ignores `SLIP_WAIT` blocks while the shift takes effect.
   `LOCK_CNT` = 64 legal headers in a row declare lock. Once locked,
   `BAD_MAX` = 16 illegal headers within a window of 64 blocks drop the lock.
   These are the IEEE 802.3 clause-49 rules.
2. **Descrambling.** The decoder uses the self-synchronising x⁵⁸+x³⁹+1
   descrambler, one bit at a time in line order (bit 0 first): out = in ⊕
   s[38] ⊕ s[57], and in is shifted into s. Because it is self-synchronising,
   it needs no seed and recovers after 58 bits.
3. **Forwarding.** Data blocks leave as one word one cycle later. Control
   blocks (idles) are consumed.

A link cannot be paused. If the channel FIFO is full, the word is dropped and
`drop_cnt` counts it. A sticky per-channel "has dropped" flag is visible in
status word 8.

The 64/66B coding and the 16-link structure follow the paper. The lock
procedure, the scrambler polynomial and the drop policy are choices of this
design. The paper does not specify the GWT framing beyond "64/66B".

## Crossing into the system clock (`async_fifo`)

There is one FIFO per link, 512 words deep (`CH_FIFO_DEPTH`). Its read and
write pointers are Gray-coded and pass through two-flip-flop synchronisers.
Full and empty are computed from the synchronised pointers, so they are
pessimistic and never wrong. The FIFO absorbs the mux's round-robin gaps and
short stalls of the buffer controller. At 10.24 Gb/s, 512 words is about
3.3 µs of one link.

The data-path reset (`rst`, or the soft reset in CTRL[0]) is stretched to 16
system cycles. It then reaches each link clock through its own two-stage
synchroniser. Channel enables cross the same way.

## Merging 8 links (`axis_mux8`)

Two instances exist, one per chip half (TOP = links 0..7, BOT = 8..15). Each
cycle the mux grants up to `LANES` = 4 of its requesting inputs. It takes
them in round-robin order, starting after the input granted last. Their
words go in output lanes 0, 1, 2, … of a single beat, and `m_cnt` says how
many lanes are filled.

Each input gives at most one word per cycle, which is still faster than any
GWT link. The output is a single register stage with standard AXI-Stream
`valid`/`ready`; an assertion checks that a stalled beat holds still.

Words are not tagged with their link. Every Timepix4 hit packet already
carries the pixel address, so the link is recoverable from the data.
Interleaving between links is therefore irrelevant. Order *within* a link is
what matters, and it is kept everywhere.

## The buffer controller (`buffer_controller`)

This is the heart of the design and the part with the most state.

### Lines

The SODIMM is efficient only with long bursts. The controller therefore
works in *lines* of 8 words (512 bits, one 64-byte DDR4 burst):

- The **packer** has a staging buffer of 8 + 2·`IN_LANES` = 16 words.
- Each cycle it appends the TOP beat and then the BOT beat. A beat is taken
  only if it fits completely; otherwise that half is stalled for the cycle.
  Stall cycles are counted in status word 7.
- As soon as 8 words are present, one line is cut off and queued in a
  16-line input queue.
- If input stops with a partial line in the buffer, the line is flushed
  after `FLUSH_CYCLES` = 256 idle cycles. Each line carries an 8-bit mask
  of valid words, so a partial line is legal. This keeps latency bounded
  when hits trickle in at low rate.

### Bypass or spill: the one rule that keeps order

The router looks at the oldest line in the input queue. It has two places to
send it: the output FIFO (`OUT_DEPTH` = 64 lines, feeding the UDP core), or
the ring buffer in the SODIMM.

- **Bypass** if the ring is empty, no read from it is still in flight, and
  the output FIFO has a free slot.
- **Spill** otherwise, if the line is full, the ring has room and
  `spill_en` is set.

A line spills only when bypass is impossible. That happens because the
output FIFO is full, meaning the input is outrunning 40 Gb/s, or because
the ring already holds older data.

The second condition matters most for correctness. Once anything is in the
ring, every later line must follow it there, or a newer line would overtake
an older one. The ring plus the output FIFO therefore behave as one long
FIFO (a "virtual FIFO"). The router switches back to bypass only when the
ring is empty *and* all of its reads have returned.

Partial lines are never written to memory. A partial line that meets a
non-empty ring waits at the head of the input queue until the ring has
drained. Partial lines occur only when the input is idle, which is exactly
when the ring drains, so this costs nothing in practice and keeps the memory
format simple.

With `spill_en` = 0 the ring is never used. A full output FIFO then simply
back-pressures the muxes, and the channel FIFOs, and finally the decoders,
drop words.

### Reading back with credits

The reader issues a read whenever the ring is not empty and the output FIFO
has a *credit*. The number of credits is `OUT_DEPTH` − (FIFO fill) − (reads
in flight). A slot is promised to a read when the read is issued, so data
coming back from the memory always has a place to land. This holds whatever
the memory latency, and an assertion checks it. Memory latency is hidden as
long as `OUT_DEPTH` lines cover it: 64 lines is 256 cycles of output.

Memory commands go through one port. When a read and a write both wait,
they alternate, so a long spill cannot starve the drain and the drain cannot
starve the spill. The input queue keeps filling while it waits, and if it
fills, the packer stalls.

### Memory port

The memory port is a simplified controller user interface:

- a command (`ddr_cmd_valid/ready`, `ddr_cmd_we`, `ddr_cmd_addr` in
  64-byte lines);
- write data travelling with the command;
- read data returning in command order on `ddr_rd_valid`, any number of
  cycles later.

`DDR_ADDR_W` = 29 gives 2²⁹ lines = 32 GB. A thin adapter to the vendor
controller's native or AXI interface is needed on a real board.

### Monitoring

Words in and words out are counted over windows of `RATE_WINDOW` = 10⁶
cycles (3.2 ms at 312.5 MHz, about a tenth of a pulse period). The following
status words are exported:

- the counts from the last window (words ÷ window × 64 bit × f_clk gives
  Gb/s);
- the ring fill level and its peak;
- the number of lines spilled and bypassed;
- the input stall cycles;
- whether a spill is in progress.

### Unpacker

The unpacker reads lines from the output FIFO and sends their valid words as
beats of up to `OUT_LANES` = 2 words. This means 4 beats for a full line,
and fewer for a partial one.

## UDP framing (`udp_tx`)

There are two instances, for the 40G and the 10G MAC. CTRL[2] selects which
one receives the stream; the other stays idle.

- **Banks.** Words are gathered in two ping-pong banks of `PAYLOAD_WORDS` =
  1024 words, giving an 8 KiB payload in a jumbo frame. A bank closes when
  it cannot take another full beat, or `UDP_TIMEOUT` = 1024 cycles after the
  last word.
- **Frame.** A closed bank goes out as one Ethernet II / IPv4 / UDP frame:
  - The header is 42 bytes, with big-endian fields and the DF flag set.
  - The IPv4 header checksum is computed in logic. The UDP checksum is 0,
    which IPv4 allows.
  - The IPv4 identification field counts frames, so the receiver can see
    lost packets. That is the one risk of UDP the design must live with.
- **Byte order.** Payload words are sent least significant byte first. The
  output is `8·LANES` = 16 bytes wide.
- **Memories.** Each bank is split into `LANES` word-interleaved memories.
  A beat of up to `LANES` consecutive words then writes each memory once.
- **Byte alignment.** Because 42 is not a multiple of 8, every output beat
  straddles words. Byte *p* of beat *j* is byte (p+6) mod 8 of payload word
  j·LANES − 6 + ⌊(p+6)/8⌋. So each beat reads `LANES`+1 consecutive words,
  and which memory feeds which byte lane is fixed.
- **Frame length.** A frame of N words takes ⌈(42 + 8N)/16⌉ beats, with
  `tkeep` marking the last beat's valid bytes. At N = 1024 that is 515
  beats, so the framing costs 0.6 % of the link.

MAC addresses, IP addresses and ports come from the control registers. The
MAC adds preamble and FCS. The 10G instance has the same 128-bit width and
relies on `tready` from its MAC to slow it to 10 Gb/s. The testbenches
exercise this with a sink that is ready one cycle in four.

## T0 time stamps (`t0_tdc`)

T0 marks each neutron pulse. The input is synchronised with two flip-flops,
and each rising edge latches a free-running 48-bit cycle counter. The unit
also counts the pulses and measures the period in cycles. `t0_stb` pulses
three cycles after the edge. CTRL[3] zeroes the counter to align it with the
chip's time base.

The resolution is one clock cycle (3.2 ns at 312.5 MHz). The paper names a
TDC on the T0 input but gives no structure or resolution. A fine
(sub-cycle) stage would be device-specific and is not included.

## Control registers (`control_regs`, AXI4-Lite, 32-bit, byte addresses)

| Address | Name | Contents |
|---|---|---|
| 0x00 | CTRL | [0] data-path soft reset (self-clearing), [1] spill enable, [2] output select 0 = 40G / 1 = 10G, [3] clear T0 time base (self-clearing) |
| 0x04 | CH_EN | [15:0] link enables (0..7 TOP, 8..15 BOT) |
| 0x08 / 0x0C | SRC_MAC_L / SRC_MAC_H[15:0] | source MAC |
| 0x10 / 0x14 | DST_MAC_L / DST_MAC_H[15:0] | destination MAC |
| 0x18 / 0x1C | SRC_IP / DST_IP | IPv4 addresses |
| 0x20 | PORTS | {source port, destination port} |
| 0x40 + 4·i | STATUS i | read-only, below |

After reset, all links are enabled, spill is on and the output is 40G.
Status words:

| i | Meaning |
|---|---|
| 0 | link lock mask |
| 1 | words in per monitor window |
| 2 | words out per monitor window |
| 3 | ring fill (lines) |
| 4 | ring peak fill (lines) |
| 5 | lines spilled |
| 6 | lines bypassed |
| 7 | input stall cycles |
| 8 | sticky per-link drop flags |
| 9 | 40G frames sent |
| 10 | 10G frames sent |
| 11 / 12 | last T0 stamp, low / high |
| 13 | T0 count |
| 14 | T0 period (cycles) |
| 15 | [0] spill active |

## Slow control (`slow_control`)

Slow control uses a second AXI4-Lite port:

- **TXDATA** (0x00) queues 32-bit command words.
- **RXDATA** (0x04) pops reply words.
- **STATUS** (0x08) gives busy, the two FIFO levels and an RX-overflow flag.

The words are shifted to the chip MSB first on `sc_dout` while `sc_cs_n` is
low. Data changes on the falling edge of `sc_clk` and is sampled from
`sc_din` on the rising edge, so every command returns a 32-bit reply.
`sc_clk` = clk / (2·`SC_CLK_DIV`).

The Timepix4 slow-control protocol itself is not described in the source
material. This block is therefore a generic word mover, and the command
encoding is left to software on the processor. Pixel threshold equalisation
is such software: it scans the 32 threshold-trim codes per pixel and uploads
the result through this path.

## Departures and open points

- **Assumed throughput figures.** The system clock (312.5 MHz), the lane
  counts and all FIFO and frame sizes are choices of this design. They are
  sized so that the stated rates (160 Gb/s in, 40 Gb/s out) are met.
- **Bandwidth detection.** "Input bandwidth exceeds 40 Gb/s" is detected as
  "the output FIFO is full". The rate counters are for monitoring only and
  do not steer the data.
- **Buffer status path.** The buffer controller reports its status through
  the control registers, not through its own processor-bus port.
- **SODIMM limit.** At the full 160 Gb/s, a spill needs more SODIMM
  bandwidth than DDR4 at 19.2 GB/s provides (see *Rates and widths*).
  Sustained full-rate pulses would need a wider or second memory, or
  spilling only the excess instead of everything after the first spilled
  line. The latter breaks strict ordering.
- **10G port width.** The 10G port uses the same 128-bit framer as the
  40G port. A MAC with a 64-bit interface needs a width converter.
- **Not in the RTL.** The following are vendor or board parts and are not
  in the RTL: GTH transceivers and gearboxes, the DDR4 controller, the
  Ethernet MACs/PCS, the processor system and its TCP control software, the
  AXI interconnect, clocking (SI5345), power and cooling.

## Files

- `rtl/tpx4_pkg.sv` holds the shared types: word, line, mask, the
  output-select enum and the UDP configuration struct.
- Every other `rtl/*.sv` file is one module, named as above. The helpers are
  `sync_fifo` (first-word fall-through) and `axil_slave`, a small AXI4-Lite
  front end shared by both register blocks.

In `tb/`:

- `gwt_model_pkg.sv` is a GWT transmitter model. It scrambles, adds sync
  headers, inserts idles at a set percentage, starts at an arbitrary bit
  offset and obeys `slip`.
- `ddr_model.sv` is a behavioural SODIMM. It has a sparse memory, a fixed
  read latency and random command back-pressure, and counts lines written
  and read.
- `tb_<module>.sv` is one self-checking testbench per block.
- `tb_top.sv` is the end-to-end test at reduced sizes. `tb_top_full.sv` is
  the same test at the default parameters. Both include `tb_top_body.svh`,
  which holds the test sequence.
- `tb_top_env.svh` holds the environment that all system-level tests share:
  clocks, link models, the SODIMM and MAC sinks, the frame parser and the
  bus tasks.
- `tb_workloads.sv` runs the operating points described in *Operating
  points in simulation* below.

The end-to-end test runs 16 links on slightly different clocks, each
starting misaligned. It checks the following:

- every link locks;
- light load bypasses the SODIMM;
- a burst of about 4 words/cycle against 2 out spills and fully drains;
- switching to the 10G port works;
- T0 pulses are stamped with the right period;
- slow-control words round-trip through a chip model;
- with the output stalled and spill off, inputs are back-pressured and words
  are dropped.

Every output frame is parsed: addresses, lengths and the IPv4 checksum. Each
link's sequence numbers are checked for order and, before the last phase,
for completeness. The test counts each of those mechanisms and fails if one
never happened.

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog.

## Operating points in simulation

`tb_workloads` drives the system at the detector's operating points. The
buffers are reduced (a 1024-line ring, 64-word frames) and the pulse timing
is compressed. Link rates below 10.24 Gb/s are modelled by the share of idle
blocks. With 64-word frames the output carries about 1.83 words/cycle.

| Operating point | Offered | Observed | Outcome |
|---|---|---|---|
| X-ray test: 2 links at 2.56 Gb/s | 0.25 words/cycle | about 240 words per 1000 cycles in | all bypassed, nothing spilled |
| Pulsed beam: 16 links at 5.12 Gb/s (80 Gb/s), 1:4 duty cycle, 3 pulses | 4 words/cycle during the pulse | about 3900 in and 1830 out per 1000 cycles | about 955 lines spilled per pulse, ring peak about 510 lines, empty before the next pulse, no word lost |
| Full chip rate: 16 links at 10.24 Gb/s | 8 words/cycle | inputs stalled, link FIFOs drop | see below |

The full-rate row is expected to fail to keep up, and the test checks that
the failure is visible in the status words. With the full 32 GB ring, the
limit would be the SODIMM bandwidth (see *Rates and widths*). Here the small
test ring also fills, after which input is held to the output rate.

## Simulating

The simulator is plain Verilator 5. Each testbench is built with the
package first and then the files it uses:

```
verilator --binary --timing --assert -Irtl -Itb rtl/tpx4_pkg.sv \
    rtl/udp_tx.sv tb/tb_udp_tx.sv --top-module tb_udp_tx -o sim
./obj_dir/sim +verilator+rand+reset+2
```

For the buffer controller add `tb/ddr_model.sv rtl/sync_fifo.sv
rtl/buffer_controller.sv`. For the whole design add `tb/gwt_model_pkg.sv
tb/ddr_model.sv` and all of `rtl/*.sv`, with top `tb_top`, `tb_top_full` or
`tb_workloads`.
`+verilator+rand+reset+2` starts every register at a random value, which
checks that all read state is reset.

Run times on a desktop machine:

- block tests: a second or less;
- `tb_top`: about 15 s;
- `tb_top_full`: about 40 s;
- `tb_workloads`: about 20 s.

`tb_udp_tx` takes a parameter `L` (words per beat, default 2); it passes
with 1, 2 and 4 (`-GL=4` on the verilator command line).
