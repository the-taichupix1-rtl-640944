# TaichuPix1 digital readout in SystemVerilog

TaichuPix1 is a prototype monolithic active pixel sensor for the vertex detector
of the proposed CEPC collider. It has 25 x 25 um pixels in a 192-column x
64-row matrix. It reads hits out data-driven, with no frame scanning: a pixel
that fires raises a flag in its column, the column's end logic dates the hit with
a 40 MHz timestamp and drains the hit addresses in priority order, and the
periphery either sends every hit off chip (triggerless mode) or keeps only the
hits that match an external trigger (trigger mode). Hits leave the chip as 32-bit
words on a serial link.

This repository holds synthesizable RTL for the digital part of that chip: the
in-pixel logic of both matrix halves, the double-column drain, the end-of-column
timestamping, two FIFO levels, the trigger matching, the group readout, the
serializer's word/bit logic with its PRBS self-test, and an SPI configuration
and debug port. The analog front-end, the PLL, the CML output driver and the
bias DACs are analog and are not modelled. Their signals are ports of the top
module.

The chip's published description gives the architecture, the names, the sizes
and the output format. It gives few internal details. Where it is silent, this
RTL makes its own choices. Each one is listed in
[Where this RTL departs from the chip](#where-this-rtl-departs-from-the-chip) and
in the opening comment of the module concerned.

## Data path at a glance

```
 outd[d][a] (discriminators)                                    one per double column d = 0..95
   -> dcol_fei3 (d < 48) / dcol_alpide (d >= 48) --FASTOR/READ/ADDRESS--> eoc
   -> fifo_column (sync_fifo, 16 x {ts, addr}) -> trigger_match --req/grant-->
 readout_controller (3 groups x 32 double columns, 1 word/cycle)
   -> fifo_chip (sync_fifo, 64 x 32 bit) -> serializer (32:1 mux, bit clock) -> dout
                                         \-> spi_config debug read (debug mode)
 timestamp_counter (8 bit, 25 ns) -> every eoc, trigger_match, trigger_history
```

| Parameter | Value | Origin |
|---|---|---|
| Double columns | 96 (192 columns) | chip |
| Pixels per double column | 128 (64 rows x 2) | chip |
| FE-I3-like / ALPIDE-like double columns | 0..47 / 48..95 | chip |
| System clock, timestamp step | 40 MHz, 25 ns, 8 bits | chip |
| Readout groups | 3 x 32 double columns (64 columns) | chip |
| Output word | 32 bits | chip |
| fifo_column depth | 16 | this design |
| fifo_chip depth | 64 | this design |
| Serial rate used in tests | 160 Mbps (bit clock 4 x 40 MHz) | chip operating point |

## The pixel matrix: two in-pixel schemes, one column interface

Two neighbouring pixel columns share one strip of digital logic and one address
bus. Together they form a *double column* of 128 pixels. Inside a double column
the pixels are numbered in a serpentine, and the numbering differs between the
two halves of the matrix:

| row (0 = bottom) | FE-I3-like left / right | ALPIDE-like left / right |
|---|---|---|
| 63 (top) | 127 / 126 | 0 / 1 |
| 62 | 124 / 125 | 3 / 2 |
| ... | ... | ... |
| 1 | 3 / 2 | 124 / 125 |
| 0 | 0 / 1 | 127 / 126 |

In both halves the top pixel has the highest priority, and the readout walks
the serpentine downwards. An FE-I3-like column therefore emits addresses
127, 126, ... 0, and an ALPIDE-like column emits 0, 1, ... 127.

Both double-column types present the same three signals to the end of column:

* `fastor`: high while any pixel of the double column holds a hit;
* `address[6:0]`: the address of the highest-priority pixel holding a hit;
* `read`: while high, the pixel on `address` is cleared at the next rising
  clock edge.

**FE-I3-like (`pixel_fei3`, `dcol_fei3`).** Each pixel has three parts:
* a state register, set while the discriminator output `outd` is high;
* a priority stage in a daisy chain (`prev_busy` in, `next_busy` out);
* an address generator that puts the pixel's fixed address on a wired-OR bus
  while the pixel holds the token.

The chip builds the address with a pull-up/pull-down network rather than a ROM.
In the RTL each selected pixel ORs its constant address onto the bus. `fastor`
is the end of the chain. The state register is *level*-set. A hit that has been
read is stored again if `outd` is still high. That is how the chip's FE-I3-like
scheme behaves, and it is why the other scheme was built differently.

**ALPIDE-like (`pixel_alpide`, `aerd`, `dcol_alpide`).** The hit store is an
edge-triggered flip-flop with a reset. A hit is stored once per rising edge of
`outd` and is not stored again while the analog pulse lasts. A binary tree
called the AERD (address encoder and reset decoder) reads the 128 flip-flops:
* Going up the tree, each node reports "some hit below" and the address of the
  first hit, with the left branch winning.
* Going down, a READ follows the same choices, so only the pixel that was
  encoded gets its reset.

The chip uses a "boosting speed" AERD that also reads on the falling clock
edge. Only the standard rising-edge version is built here (see departures).

Both pixel types have a mask flip-flop and a pulse-enable flip-flop. A masked
pixel ignores its discriminator. A pixel with pulse enable set takes a hit from
the global digital test pulse `DPULSE`. Both flip-flops are written one pixel at
a time through the SPI `PIXCFG` register.

All in-pixel logic is modelled synchronously on the 40 MHz clock: `outd` is
sampled at the rising edge. The chip's pixel logic is asynchronous, but its
readout runs at the same 40 MHz.

## End of column: timestamps and the READ rhythm (`eoc`)

Each double column has an end-of-column block. It works as follows:

1. When `fastor` rises, it latches the current timer value. That value is the
   timer's value in the first cycle in which `fastor` is high.
2. While `fastor` stays high and `fifo_column` has room, it drives READ for one
   cycle and then leaves it low for one cycle. A hit is therefore read every
   50 ns. The idle cycle gives the 128-pixel priority chain a whole cycle to
   settle after a pixel is cleared.
3. In each READ cycle it writes `{timestamp, address}` into `fifo_column`.

All hits read during one `fastor` pulse carry the same timestamp, including hits
that arrive while earlier ones are still being read. Two hits in the same pixel
before it is read merge into one. A new timestamp is taken only when `fastor`
has gone low and rises again.

This matches the chip's timing diagram. There the timer counts 1, 2, 3, ...,
FASTOR rises while the timer shows 2, and the hits read in that pulse carry
timestamp 3. In this RTL, a discriminator pulse that arrives while the timer
shows 2 is stored at the edge that moves the timer to 3.

Example: `outd` is sampled high at rising edge P. Then `fastor` is high from P
on. The timestamp is the timer value between P and P+1. The first READ is high
between P+1 and P+2, and the first word enters `fifo_column` at P+2. A 3-pixel
cluster is drained in 175 ns, inside the 500 ns dead-time target.

When `fifo_column` is full, READ is held off. The hits wait in the pixels, and
`fastor` stays high, so later hits in that column join the old timestamp.

## Trigger matching: the hardest part

The trigger arrives some microseconds after the collision it selects. So the
periphery must keep every hit for at least the trigger latency and then decide
whether a trigger claimed it. The chip's figures are a latency of 3 to 6 us, a
matching window of up to 175 ns (7 timestamps), and an 8-bit timer that wraps
every 6.4 us.

This RTL splits the job in two:

* **`trigger_history`** is shared by all columns. It has one bit per timer value
  t. The bit is rewritten every cycle in which the timer shows t, with the
  trigger level of that cycle. So bit t tells whether a trigger came at timer
  value t during the last 256 cycles.
* **`trigger_match`** sits at the output of each `fifo_column` and looks only at
  the record at its head, with timestamp `ts`. It waits until the record's age,
  `timer - ts` (mod 256), has reached `latency + window`. By then every trigger
  that could claim the record has been recorded. It then checks the history
  bits `ts + latency + d` for `d = 0 .. window-1`:
  * If any of those bits is set, the record is *matched*. It is offered to the
    readout controller and popped when granted.
  * If none is set, the record is *dropped*. It is popped without being offered.

  In triggerless mode every head record is offered at once.

Worked example, with latency 120 ticks (3 us) and window 7:
* A hit with timestamp 10 is kept if the trigger line was high while the timer
  showed 130 to 136.
* The decision falls when the timer reaches 137.
* The history bit for 130 is overwritten when the timer comes round to 130
  again. So the decision must come before that, which is why latency is clamped
  to 240 ticks (6 us): 240 + 7 < 256.

Only the head of each column FIFO is examined. That is enough: records enter a
column FIFO in timestamp order, so the head is always the oldest record of its
column, and a waiting head never hides an older record behind it.

Limitation: a record that waits at the head for more than 256 cycles is judged
with a wrapped age. This only happens if the readout controller is blocked for
more than 6.4 us.

## Group readout and the output word (`readout_controller`)

The 96 double columns form three readout groups of 32: double columns 0..31,
32..63 and 64..95. The controller works as follows:

* Each clock cycle it takes at most one record and writes it to `fifo_chip`.
* It serves the lowest-numbered enabled group that has a request.
* Inside that group it serves the double columns round-robin: after double
  column i, the search starts at i + 1.
* It gives no grant while `fifo_chip` is full.

A group can be switched off in `CTRL`. The chip's users did this to give every
column of the group under study the same chance of being read.

The word written to `fifo_chip`:

| bits | field | content |
|---|---|---|
| 31 | data available | 1 for a hit, 0 for an idle word |
| 30:23 | timestamp | 8-bit timer value |
| 22:14 | Addr_Dcol | double column 0..95 |
| 13:4 | Addr_row | 7-bit pixel address inside the double column, zero-extended |
| 3:0 | pattern | 0 (compression pattern not implemented) |

The field positions are those of the chip. Putting the in-column pixel address
into the row field is this design's choice. To find the physical row and column,
use the serpentine table above.

## Serializer (`serializer`, `prbs7`)

The serializer runs in two clock domains:

* In the bit-clock domain (`clk_ser`, supplied by the PLL), a 5-bit counter
  drives a 32:1 multiplexer that sends the current word most significant bit
  first.
* In the 40 MHz domain, a holding register is refilled from `fifo_chip`.

The two sides hand over through a toggle request and a toggle acknowledge, each
passed through a two-flop synchronizer:
* At the last bit of a word, the bit side takes the holding register if the
  40 MHz side has acknowledged the previous request, and toggles the request.
  If there is no acknowledge yet, it sends an idle word (all zeros).
* The 40 MHz side sees the toggled request, loads the next word into the
  holding register (or zero if `fifo_chip` is empty), pops the FIFO and toggles
  the acknowledge.

A refill takes about four 40 MHz cycles. Words therefore go back to back at
160 Mbps (one word per 200 ns) and at bit clocks up to about 8 x 40 MHz. Faster
bit clocks insert idle words.

The receiver must find the word boundaries by itself. The only marker is bit 31
(the data-available bit) of hit words, as on the chip.

`prbs_en` replaces the data by a PRBS-2^7 sequence (x^7 + x^6 + 1, seed all
ones) for link tests. `en = 0` stops the serializer; the top does this in debug
mode.

## SPI configuration and debug port (`spi_config`)

The SPI port is sampled by the 40 MHz clock through synchronizers. SCLK must
stay at 10 MHz or below. A frame runs in SPI mode 0, MSB first, with CSB low
throughout. It has 40 bits: an 8-bit command `{write, addr[6:0]}` and then 32
data bits. On a read, MISO carries the register's value in the 32 data bits.

| addr | name | access | content (reset value) |
|---|---|---|---|
| 0x00 | CTRL | r/w | [0] trigger mode (0), [1] debug mode (0), [4:2] group enable (111), [5] serializer on (1), [6] PRBS (0) |
| 0x01 | TRGLAT | r/w | [7:0] trigger latency in 25 ns ticks (120 = 3 us) |
| 0x02 | TRGWIN | r/w | [2:0] window in ticks (7 = 175 ns) |
| 0x03 | IDAC | r/w | [7:0] current-DAC code (128) |
| 0x04 | VDAC | r/w | [9:0] voltage-DAC code (512) |
| 0x05 | PIXCFG | w | [6:0] double column, [13:7] pixel address, [14] mask, [15] pulse enable |
| 0x06 | PULSE | w | [0] one-cycle DPULSE, [1] one-cycle APULSE |
| 0x07 | FIFO | r | next `fifo_chip` word, popped; 0 when empty |
| 0x08 | STATUS | r | `fifo_chip` fill level |

Debug mode turns the serializer off and connects the read side of `fifo_chip`
to the FIFO register. The whole output stream can then be read over SPI alone.

## Top level (`taichupix1_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 40 MHz system clock; asynchronous active-low reset |
| `clk_ser` | in | serializer bit clock from the PLL |
| `outd[96][128]` | in | discriminator outputs, `[double column][pixel address]` |
| `trigger` | in | external trigger, synchronous to `clk` |
| `csb`, `sclk`, `mosi`, `miso` | in/out | SPI |
| `dout` | out | serial data for the CML driver |
| `apulse` | out | analog injection strobe for the front-ends |
| `idac[7:0]`, `vdac[9:0]` | out | DAC codes |
| `timer[7:0]` | out | timestamp counter (observation) |

Parameters `N_DC`, `N_DC_FEI3`, `N_GRP`, `COL_FIFO_DEPTH` and `CHIP_FIFO_DEPTH`
default to the values in the first table.

## Where this RTL departs from the chip

The chip's published description stays silent on the following points. Each is
settled here as stated:

* The in-pixel logic is synchronous to the 40 MHz clock.
* In the FE-I3-like scheme, the address network is a wired OR of constant
  addresses.
* READ is one cycle on, one cycle off. The rate of one hit per 50 ns is a choice
  of this design.
* READ waits while `fifo_column` is full.
* FIFO depths are 16 (column) and 64 (chip).
* The trigger logic uses a 256-entry history. The window starts at the nominal
  latency and extends later, and unmatched records are dropped.
* Readout groups have fixed priority between them and round-robin inside.
* The 7-bit in-column address goes into the row field, and the pattern field is
  always 0.
* The serializer sends MSB first, sends an all-zero idle word, and uses a toggle
  handshake between clock domains.
* The PRBS polynomial is x^7 + x^6 + 1.
* The SPI frame, the register map, the reset values, and one register for each
  DAC type are choices of this design.

Parts of the chip not built:

* The boosting-speed AERD, which reads on both clock edges. Only the standard
  AERD is built.
* The data compression pattern.
* A reference or synchronisation pattern in the serial stream. The chip has none
  either.
* The analog front-end, the collection diode, the PLL, the CML driver and the
  DACs. These are analog; their signals are top-level ports.

Back-pressure instead of loss: the chip was seen to lose hits when many came at
once in triggerless mode. The mechanism behind that loss is not documented.
Here, a full FIFO stops the stage before it, and hits wait in their pixels. A
hit is lost only when the same pixel fires again before it is read, in which
case the two merge. A masked pixel and, in trigger mode, a record no trigger
claims are also not read out, by design.

Known limit: the triggerless full-scale figure of 3.84 Gbps does not fit this
design. The readout controller moves at most one word per cycle (1.28 Gbps), and
the serializer refill sustains about 320 Mbps.

## Files

`rtl/` has one module or package per file:
* `taichupix_pkg` holds the shared sizes, the record and word structs and the
  register enum.
* `sync_fifo` serves both FIFO levels.

`tb/tb_<module>.sv` is a self-checking testbench for each module. Each one
prints `TB_RESULT checks=N failures=M` and stops itself with a watchdog if it
hangs. `tb/tb_taichupix1_top.sv` runs the full-size chip end to end at default
parameters. It covers:
* triggerless readout of both schemes;
* a column-FIFO overflow;
* trigger mode with matched and dropped hits;
* groups switched off and on;
* mask and digital pulse over SPI;
* debug readout with `fifo_chip` full;
* the PRBS self-test.

It counts every mechanism, and a mechanism that never occurs is a failure.

`tb/tb_workload_sr90.sv` reproduces the two source-run setups of the chip's
characterisation on the full-size design:
* triggerless readout at 160 Mbps with one readout group enabled;
* trigger mode with a 3 us latency and a 175 ns window.

Particles are random 2- or 3-pixel clusters (mean 2.6). In trigger mode the
test decides on its own which clusters a trigger selects, and checks that
exactly those clusters, and nothing else, come out of the serial link.

## Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/taichupix_pkg.sv tb/tb_taichupix1_top.sv --top-module tb_taichupix1_top \
    -Mdir obj_top -o sim
./obj_top/sim
```

Replace the testbench name to run any other test. The full-size end-to-end test
takes about a minute to build and about 10 s to run. Lint a module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/taichupix_pkg.sv rtl/<module>.sv`.

All testbenches start the asynchronous reset with a falling edge of `rst_n`
shortly after time 0. Verilator does not treat an initial value as an edge, so
a testbench of your own should do the same.
