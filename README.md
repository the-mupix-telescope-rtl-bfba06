# MuPix telescope readout: sensors to PC in time-sorted blocks

This is the digital readout of a beam telescope. It has up to eight layers of
MuPix7 high-voltage monolithic pixel sensors and a pair of scintillating tiles
for timing. Each sensor stamps its hits with a coarse time and sends them over a
serial link as it finds them. That order is not time order.

Two FPGAs each serve four sensors. They merge the four hit streams and re-sort
them by time stamp. They pack the sorted hits into blocks that each cover 32
time stamps (512 ns). The tile hits get a fine 500 MHz time stamp and go into
tile blocks over the same time windows.

The PC gets the blocks in one of two ways:
- **polling**: one register read per word;
- **DMA**: the FPGA writes into a ring buffer in host memory.

All sensors and both FPGAs share one time base, so hits from different layers
and from the tiles can be matched by time stamp alone. One FPGA is the master.
It sends a synchronous reset over a cable to itself and to the slave. The reset
is also forwarded to the sensors, so that every time stamp counter restarts on
the same 125 MHz clock edge.

## Blocks and data flow

```
pixel comparators ──► mupix7_digital (x8) ─ 1.25 Gbit/s 8b/10b ─┐
                      ts_counter, hit_buffer, readout_fsm,      │
                      enc_8b10b, serializer                     │
                                                                ▼
fpga_readout_core (x2): deserializer ► dec_8b10b ► link_unpacker (x4)
                        ► hit_merger ► time_sorter ─────────────┐
   tile_in ► tile_tdc (500 MHz) ► async_fifo ► tile_block_builder ┤
                                                  block_arbiter ◄┘
                                   ► sync_fifo (1024 words)
                                   ► dma_engine | polling_readout
                        control_registers, reset_distributor, ts_counter
mupix_telescope: 8 sensors, 2 cores (master/slave), reset cabling, clock_switch x2
```

The analog pixel, the PLLs, the PCIe endpoint, the PC and the tiles' analog
front end are not part of the RTL. Their signals are ports of `mupix_telescope`:
- `pix_hit`: one comparator output per pixel;
- `pll_ref`: the clock-switch output toward the PLL;
- `coreclk`, `fastclk`, `bitclk`: the PLL clocks coming back;
- the register buses and the DMA write bus.

## Time stamps

- **Sensor time stamp.** It is 8 bits and advances every second 125 MHz clock
  (62.5 MHz, 16 ns). `ts_counter` with `PRESCALE=2` makes it.
- **Latching.** A pixel cell (`hit_buffer`) latches the current time stamp on
  the rising edge of its comparator output. It then holds the hit until the
  readout clears it. While a pixel is full, a new hit on that pixel is lost.
- **FPGA time.** Each FPGA runs the same counter extended to 32 bits (`now`,
  register `TIME`). The sensor time stamp is `now[7:0]`.
- **Tile time.** The tile TDC counts at 500 MHz. That is 8 counts per 62.5 MHz
  time stamp, so a 256-count tile window equals a 32-stamp pixel block.

**Synchronous reset.**
1. The PC writes CTRL bit 0 on the master.
2. The master's `reset_distributor` drives a 4-clock pulse on both reset
   outputs. `reset_1` loops back to the master's own input; `reset_2` goes to
   the slave.
3. Each FPGA puts its input through two flip-flops and turns the rising edge
   into a one-clock `sync_rst`.
4. `sync_rst` clears the FPGA time, the sorter, the merger, the output FIFO and
   the polling register. It is also sent to that FPGA's four sensors.
5. The tile counter picks up the same pulse in the 500 MHz domain.

Both FPGAs see the same cable delay in this model, so their `TIME` registers
read the same value on the same clock. The end-to-end test checks this.

## Link format

The priority readout (`readout_fsm`) picks the lowest-numbered full pixel.
The pixel number is `col * N_ROWS + row`. The pixel leaves as a frame of four
8b/10b symbols:

| Symbol | Content |
|---|---|
| K28.0 | frame header |
| data | `{3'b0, col[4:0]}` |
| data | `{2'b0, row[5:0]}` |
| data | 8-bit time stamp |

- The link sends K28.5 when idle.
- At 125 Msymbol/s this gives 31.25 Mhit/s per link.
- The pixel is cleared when its frame header is sent.

On the FPGA side:
- **`deserializer`.** It shifts the bit stream into a 20-bit window and looks
  for the K28.5 pattern in both disparities. It locks once the comma has shown
  up 4 times at the same offset. It then hands out one word per 125 MHz clock.
- **`dec_8b10b`.** A table-free decoder. It flags invalid codes.
- **`link_unpacker`.** It rebuilds hits and labels each one with the layer
  number, `{FPGA id, link}`. A broken frame is counted and not turned into a hit.

Bit clock and word clock are the same PLL's outputs (10:1, phase locked). The
serializer and the deserializer pass the word boundary into the bit domain as a
toggling flag, so no clock is derived from logic.

## Time sorting (the hard part)

The four links deliver hits in readout order. A burst of pixels that fire
together comes out over many clocks, so stamps from several time stamps back
arrive late. In time, a burst on one sensor can even come out high pixel first
and low pixel last.

**The bin memory.** `time_sorter` keeps one bin per value of the 8-bit time
stamp (256 bins). Each bin has `SLOTS=8` entries. A hit is written straight
into the bin of its own stamp.

**The reader.** A reader walks the bins in order, always `DELAY=64` time stamps
(1 µs) behind `now`. A bin is therefore only read once no more hits for it can
come, unless the sensor took longer than 1 µs to read it out.

**Block output.** Every 32 bins form a block with the block number
`now[31:5]`. A block is only started when all 32 of its bins are due, so each
block leaves in one burst:

1. a header;
2. the hits of the 32 bins, in time order;
3. a trailer with the hit count and an overflow flag.

Empty blocks are sent too, so block numbers run on without gaps. The reader
takes one clock per hit and one per empty bin. Since bins fall due every two
clocks, it sustains about 62.5 Mhit/s.

**Drops.** A hit is dropped when any of these holds:
- its bin is full;
- it is `DELAY` or more stamps old (its bin was read already);
- the reader has fallen so far behind that the bin still belongs to the
  previous wrap of the 8-bit stamp.

A drop sets the overflow flag of the next trailer and counts in `DROPS`. The
merger also counts here when one of its 16-deep per-link FIFOs is full.

**Tile blocks.** `tile_block_builder` sends a tile block once `now` is two
windows past it. By then all of that window's stamps have crossed the 500→125
MHz FIFO. Only windows that contain tile hits produce a block.

**Sharing the output.** `block_arbiter` hands the output FIFO to one source for
a whole block. When both sources wait, they alternate. A fixed priority for the
pixels would starve the tiles, because there is always a pixel block waiting.

## Output words

Every word is 32 bits, and `[31:28]` gives its type. A word of 0 is never data;
polling returns 0 when nothing is buffered.

| Type | Word | Layout |
|---|---|---|
| 1 | pixel block header | `[26:0]` block number (`now >> 5`) |
| 2 | pixel hit | `[21:19]` layer, `[18:14]` column, `[13:8]` row, `[7:0]` time stamp |
| 3 | pixel block trailer | `[27]` overflow, `[15:0]` hit count |
| 5 | tile block header | `[23:0]` tile window number |
| 6 | tile hit | `[27:24]` tile, `[23:0]` low 24 bits of the 500 MHz stamp |
| 7 | tile block trailer | `[15:0]` hit count |

## Registers (word addresses, per FPGA)

| Addr | Name | Meaning |
|---|---|---|
| 0 | CTRL | bit 0: synchronous reset request (master only, self clearing); bit 1: 1 = DMA, 0 = polling |
| 1 | STATUS | `[3:0]` links locked, `[8]` master |
| 2 | DMA_BASE | ring buffer byte address |
| 3 | DMA_MASK | ring size in words minus 1 (power of two; reset 0x3FF) |
| 4 | DMA_RDPTR | host read pointer, in words (written by the host) |
| 5 | DMA_WRPTR | FPGA write pointer, in words |
| 6 | POLL_DATA | next output word; reading it removes it |
| 7 | POLL_CNT | words served by polling |
| 8–11 | HITS, DROPS, LINK_ERR, TILES | event counters |
| 12 | TIME | 32-bit FPGA time (62.5 MHz units) |

**Bus timing.** A read returns data one clock after `reg_re`. Writes take
effect on the clock of `reg_we`.

**DMA.** The DMA engine writes one word per accepted `dma_wr_valid`/`dma_wr_ready`
handshake to `DMA_BASE + 4*(wrptr & mask)`. It stalls while
`wrptr - rdptr > mask` (ring full). The output FIFO then fills, and after it
the sorter drops.

**Switching mode.** The mode can be switched during a run. A word already in
the polling register stays there and can still be read.

## Clocking

`clock_switch` is a glitch-free multiplexer between the on-board oscillator and
an external clock, one per FPGA. It enables the new clock only after the old one
has been disabled, each in its own clock domain. Its output `pll_ref` feeds the
PLL, which is outside the RTL.

## Departures from the paper and own choices

The paper describes the chain of functions. It gives no link framing, register
map, word format, buffer sizes or sorting algorithm. All of the following are
this design's choices:
- the K28.0 frame and byte layout;
- the bin sorter with `SLOTS=8` and `DELAY=64`;
- the block header and trailer formats;
- the register map;
- the ring-buffer DMA protocol;
- the alternating block arbiter;
- FIFO depths: merger 16, tile 32, output 1024;
- the reset pulse length of 4 clocks;
- the 4-comma lock rule.

Some of the sensor is simplified:
- Its readout is reduced to a flat priority encoder over all pixels. The real
  chip reads column by column.
- The 8-bit time stamp has no gray coding.
- Analog behaviour such as time walk is not modelled.

Other limits:
- The PC side (event building, track reconstruction, GUI), the PCIe endpoint
  and the PLLs are not RTL.
- The pixel count is taken as 32 columns × 40 rows.
- The sorter cannot hold the paper's theoretical peak of eight sensors at
  about 30 Mhit/s each. It handles roughly half of one FPGA's share of that;
  see the sorter capacity above.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one ends
with a `TB_RESULT checks=… failures=…` line and has a watchdog. The shared
macros live in `tb/tb_check.svh`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl rtl/mupix_pkg.sv \
    tb/tb_time_sorter.sv --top-module tb_time_sorter -Mdir obj_sorter
obj_sorter/Vtb_time_sorter
```

**`tb_mupix_telescope`** runs the whole telescope at default size: 8 sensors of
32×40 pixels, 2 FPGAs and 2 tiles each, with a 1.25 GHz bit clock. It takes a
few seconds. In order, it:
1. switches one FPGA to the external clock;
2. waits for all links to lock;
3. issues the synchronous reset and compares both FPGAs' `TIME`;
4. fires tracks through all eight layers, noise, out-of-order bursts, tile
   pulses and a 12-hit pile-up on one time stamp;
5. reads FPGA 1 by polling, and FPGA 0 first by polling and then by DMA into a
   16-word ring that fills up.

It checks every fired hit for arrival, label, address and time stamp. It also
checks block continuity, time order, trailer counts, tile hits, and that the
drops equal the pile-up excess. It counts each mechanism (simultaneous link
arrivals, reordering, arbiter contention, ring-full stalls, overflow trailers,
both readout modes, mode switch, clock switch) and fails if any of them never
happened.

`tb_fpga_readout_core` tests one FPGA as the slave, fed by four 4×4-pixel
sensors.
