# Event-wise SRAM soft-error scanner

Classic soft-error tests write a pattern into an SRAM, irradiate it for
minutes and then read out all bit flips at once. Flips from independent
particles that land close together then look like one multiple-cell upset,
and flips from one particle that land far apart look like several
independent ones: location alone cannot tell them apart. This design
attaches a time to every flip instead. The whole array is read and checked
every 128 clock cycles (125 ns at 1025 MHz, 237 ns at 540 MHz). Each flip
leaves the chip as a record holding its macro, word, flipped bits and a
36-bit cycle timestamp. Off-chip particle detectors log hits against the
same reference clock and reset, so every flip can be paired with the
particle that caused it.

The RTL here covers all the digital logic of such a chip:

* 36 SRAM macros, each a 72-bit x 128-word SRAM with its own pattern
  generator and read checker (331,776 bits in all);
* the shared scan control: address generator, FSM, ERR_ALL and the
  priority encoder;
* the timestamp counter, record assembly, ECC, the dual-clock FIFO and the
  SPI read-out;
* the serial configuration register and the CK/32 clock monitor output.

The PLL is not included. The clock `ck` enters as a pin, and the PLL
settings leave the configuration register on `pll_cfg`.

## Block structure

```
             sck,sin ──► config_reg ──sel(2)──────────────────┐   pll_cfg ──► (PLL)
                                                               ▼
 ck ─► clk_div32 ─► pllout          ┌──────── sram_macro × 36 ───────────┐
                                    │ pattern_gen ─wdata(72)─┐           │
 addr_gen ──ADD(7)────────────────► │        ▼               ▼           │
   ▲                  SRAM_WE ────► │      sram ─rdata(72)─► error_check ├─ERROR──► err_or ─ERR_ALL─► scan_fsm
   └──────── ag_cmd ◄── scan_fsm    └───────────────────────────────┬────┘
                                                       error data 36×72
                                                                    ▼
 timestamp_cnt ─ts(36)─► concat_fill ◄─(78)─ priority_enc (macro 6 + data 72)
                ADD(7) ─►    │ record (120)
                             ▼
                          ecc_enc ─(160)─► async_fifo ─► spi_reader ─► spi_sdo
                                            (CK)   (spi_sck)
```

`sram_scan_chip` is the top. All blocks run on `ck`, except the
configuration register (on `sck`) and the read side of the FIFO with the
SPI reader (on `spi_sck`). `reset` is asynchronous and active high. It
clears every register except the configuration, so a reset of the scanner
keeps the selected pattern and the PLL setting.

## The scan and the error sequence

This is the part that needs care. After reset the FSM first writes the
selected pattern into all 128 words of every macro (`ST_INIT`, 128 cycles).
It then scans. In every cycle all 36 macros read the same address `ADD`, and
`ADD` steps by one, so each word of each macro is checked once per 128
cycles. The SRAM returns data one cycle after the address. The checker
XORs that data with the pattern and registers the result one cycle later.
So a word addressed in cycle *t* raises its macro's `ERROR` in cycle *t+2*,
together with a 72-bit vector that has a 1 at every flipped bit.
`ERR_ALL` is the OR of the 36 `ERROR` outputs.

Take a flip in word *e*, found with `ERROR` first high in the cycle whose
timestamp is *M*. The sequence runs as follows (this reproduces the chip's
timing chart):

| cycle | timestamp | ADD  | state          | action                                              |
|-------|-----------|------|----------------|-----------------------------------------------------|
| t     | M-2       | e    | `ST_SCAN`      | word e read                                         |
| t+2   | M         | e+2  | `ST_SCAN`      | ERROR/ERR_ALL high; checkers frozen                 |
| t+3   | M+1       | e+3  | `ST_ERR_WAIT`  | priority encoder output valid                       |
| t+4   | M+2       | e+4  | `ST_ERR_CAPT`  | record {timestamp, ADD, macro, bits} captured; ADD steps back 4 |
| t+5   | M+3       | e    | `ST_OVERWRITE` | SRAM_WE: the pattern is written back into word e    |
| t+6   | M+4       | e+1  | `ST_FIFO_WR`   | FIFO_WE; the logged macro's ERROR cleared           |
| t+7   | M+5       | e+2  | `ST_SCAN`      | scanning resumes; word e+1 is the first word checked again |

The captured address is therefore 4 words ahead of the failing word, and the
captured timestamp is 2 cycles ahead of *M*. The host subtracts both
offsets. Reads issued between t+2 and t+5 are not checked; the rescan from
e+1 covers those words again. A flip in word e+1 is therefore found 7
cycles after the one in e, not lost. With no errors the scan never stops.
Each logged record adds 5 cycles to a pass (two waits, the overwrite, the
FIFO write and the re-read of e+1).

**Several macros failing in the same word.** Every failing macro latches
its `ERROR` in the same cycle. The priority encoder presents the
lowest-numbered one, and its `more` flag says whether others are waiting.
In that case `ST_FIFO_WR` holds the address and the FSM goes through
`ST_NEXT_WAIT` and `ST_NEXT_CAPT`. These replace only the macro number and
error bits of the record, keep its address and timestamp, and write the
FIFO again. The loop repeats until only one macro was left. Each extra
macro costs 3 cycles.

**Word overwrite.** `SRAM_WE` is common to all macros, so the overwrite
rewrites word *e* in every macro with the pattern. A macro without a flip
there already holds the pattern, so nothing changes for it. There is one exception. A flip that
strikes word *e* of another macro after that word was read in cycle *t*
and before the overwrite in *t+5* is erased without being reported. This
is a window of 5 cycles per logged error, the price of a single shared
write enable.

## The error record

The 120-bit record (`sscan_pkg::record_t`, MSB first):

| bits     | field     | meaning                                          |
|----------|-----------|--------------------------------------------------|
| 119:85   | ts        | timestamp bits 34:0, = M + 2                     |
| 84:78    | addr      | ADD at capture, = failing word + 4 (mod 128)     |
| 77:72    | macro     | macro number 0..35                               |
| 71:0     | err_data  | 1 = bit flipped                                  |

`ecc_enc` turns it into 160 bits as eight independent Hamming(20,15) codes.
Group *g* encodes record bits 15g+14..15g into code bits 20g+19..20g.
Inside a group, codeword position *p* (1..20) is stored in bit *p-1*.
Positions 1, 2, 4, 8 and 16 carry check bits. The 15 data bits fill the
remaining positions in ascending order. Check bit 2^k is the XOR of the data
positions whose index has bit *k* set. To decode, XOR together the indices
of all 1 positions. A non-zero result is the position of a single flipped
bit, which is then inverted. `tb/sscan_host_pkg.sv` contains such a decoder
and the field unpacking, and can serve as a host reference.

The record stores 35 timestamp bits, not 36; see the departures below. The
field wraps after 2^35 cycles, about 33 s at 1025 MHz.

## Read-out: FIFO and SPI frame

Records go into a 64-entry dual-clock FIFO. Its pointers are Gray-coded and
cross clock domains through two flip-flops. The read side is clocked by the
SPI clock, so the host drains the FIFO at any rate with no clock relation
to `ck`. A record that arrives while the FIFO is full is dropped. Scanning
continues, and the failing word is still rewritten.

A read is one SPI frame: hold `spi_cs_n` low and give 161 rising edges on
`spi_sck`. The host samples `spi_sdo` at each rising edge, and the chip
changes it just after the edge.

* Bit 0 is the valid flag. At this edge the reader takes the FIFO head and
  pops it.
* Bits 1..160 are the 160-bit code word, MSB first. They are all zero when
  valid was 0.

Raising `spi_cs_n` ends the frame. The FIFO's "not empty" view on the SPI
side only advances on `spi_sck` edges. So the first frame after a long
pause can report empty while a record is waiting, and the next frame
delivers it. A host should poll until it gets two empty frames in a row.

## Configuration and clock monitor

`config_reg` is a 10-bit shift register. On every rising `sck` edge the
bits move up by one and `sin` enters at bit 0. Send the PLL byte MSB first,
then the 2-bit pattern select. The patterns are:

| select | pattern        |
|--------|----------------|
| 0      | all 0          |
| 1      | all 1          |
| 2      | 0x55…          |
| 3      | 0xAA…          |

Apply `reset` after changing the pattern so that the init pass rewrites the
array.

`pllout` is `ck` divided by 32. Off chip, the number of `pllout` edges is
compared with a reference-clock count to recover the actual `ck` frequency,
which can drift when the PLL is irradiated. From that, each timestamp is
converted into time since reset.

## Redundancy

The control state is held in `tmr_reg`:

* the configuration register;
* the address;
* the FSM state;
* the timestamp;
* the priority encoder's output register.

`tmr_reg` keeps three copies and outputs their bitwise majority. All three
copies reload from the same next value, so a flip in one copy is outvoted
at once and overwritten at the next clock. The configuration register has
no reset, so it is only repaired by shifting it in again. The FIFO contents
are protected by the ECC above. The SRAM data, the checkers' error latches
and the record register are not protected.

## What follows the chip and what is this design's own

Taken from the chip's description:

* 36 macros of 72 x 128;
* the pattern generator, checker and ERR_ALL structure;
* the address, timestamp and record widths (7, 36, 78, 120, 160);
* the triplicated blocks and the ECC-protected FIFO;
* SPI read-out and the CK/32 output;
* the single-error cycle sequence, with its +4 address and +2 timestamp
  offsets, and resuming at the word after the failing one.

This design's own choices, because the chip's description does not give
them:

* the patterns;
* the init pass after reset;
* the hold-until-clear error latches and the `rd_chk`/`chk_en`/`clr` controls;
* lowest-number-first priority and the extra-macro loop;
* the record field order;
* the Hamming(20,15) code;
* the FIFO depth (64) and drop-on-full;
* the SPI pins and frame;
* the voting scheme;
* an 8-bit PLL setting field.

**Known departure.** The widths given for the record assembly disagree:
timestamp 36 + encoder output 78 + address 7 = 121 bits, but the record is
120 bits. The 160-bit ECC word also depends on 120. This design keeps 120
and drops the timestamp MSB. A host that reads the FIFO more often than
every 33 s can rebuild the full count.

**Not included.** The PLL is a mixed-signal block. Its settings interface
and lock behaviour are unknown, and the RTL expects `ck` from outside.
The same goes for the I/O pads, the particle detectors, the FPGA that
counts `pllout`, and the off-line software that pairs flips with detector
hits.

## What the sizes cover

* **Scan time.** A full pass takes 128 cycles: 124.9 ns at 1025 MHz,
  237 ns at 540 MHz. Each logged record adds 5 cycles, and each further
  macro at the same word adds 3.
* **Array size.** 331,776 bits per chip, the 0.332 Mbit of the chip.
* **Detection latency.** A flip is detected at most 130 cycles after it
  happens when no other error is being handled (one pass plus the two-cycle
  pipeline). So a hit-to-detection window of 128 cycles per scan period is
  the right pairing window.
* **FIFO capacity.** The 64-entry FIFO holds many bursts of the size seen in
  proton runs, which have a handful of events per run.
* **Sustained logging.** Sustained logging is limited by read-out: each
  record needs 161 SPI clocks. At beam rates where nearly every pass sees a
  flip, the SPI clock would have to be far above what SPI supports, and
  records beyond the 64 buffered ones are dropped.

## Simulation

Every block has a self-checking testbench in `tb/<block>_tb.sv`. Each ends
by printing `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sscan_pkg.sv tb/sscan_host_pkg.sv \
          tb/sram_scan_chip_tb.sv --top-module sram_scan_chip_tb -o sim
./obj_dir/sim
```

Use the same command with another `*_tb.sv` and `--top-module` for a
single block. The packages must come first on the command line. The tools
find the other modules through `-Irtl`/`-Itb`, since every module is in a
file of its own name.

`sram_scan_chip_tb` runs the top at full size. It checks:

* configuration and reset;
* the scan rate and PLLOUT;
* a single flip and two flips in one word;
* three macros failing in the same word;
* adjacent failing words;
* the word overwrite;
* a bit flipped inside the FIFO and corrected on read-out;
* upsets in single TMR copies;
* a 70-error burst overflowing the FIFO;
* a pattern change.

It counts each of these mechanisms and fails if one never happened. It
takes under a second of host time.

`beam_run_tb` runs an irradiation scenario at full size. It makes 150
particle hits at random times and random locations, each flipping 1 to 3
bits of one word, with the FIFO drained every ten hits. It then pairs
records with hits the way off-line event building does: a record goes with
the hit that precedes its timestamp by at most one scan period. Every hit
must pair exactly once, and at the right location. The hit-to-detection
delay must average about half a scan period. A typical run gives 65.7
cycles, about 122 ns at 540 MHz; the ideal for a uniform spread over 237 ns
is 118.5 ns.

Testbenches inject flips by writing the SRAM arrays hierarchically
(`dut.g_macro[i].u_macro.u_sram.mem[...]`). Keep those names when
restructuring.

## Files

* `rtl/sscan_pkg.sv`: sizes, record type, FSM and address-command enums.
* `rtl/sram_scan_chip.sv`: top.
* `rtl/sram_macro.sv`, `pattern_gen.sv`, `sram.sv`, `error_check.sv`: one macro.
* `rtl/addr_gen.sv`, `scan_fsm.sv`, `err_or.sv`, `priority_enc.sv`: scan control.
* `rtl/timestamp_cnt.sv`, `concat_fill.sv`, `ecc_enc.sv`: record path.
* `rtl/async_fifo.sv`, `spi_reader.sv`: read-out.
* `rtl/config_reg.sv`, `clk_div32.sv`, `tmr_reg.sv`: configuration, clock monitor, redundancy.
* `tb/sscan_host_pkg.sv`: host-side ECC decoder and record unpacking.
