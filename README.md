# A non-volatile memory chip with small row buffers

A DRAM chip reads a whole row, typically 1 KB per chip, into its row buffer on
every ACTIVATE. It has to, because reading a DRAM cell destroys its charge, so
every bit of the row must be latched and later written back. In a multi-core
system, most of that row is never used before the next ACTIVATE replaces it.
Several factors keep row-buffer hit rates low: many cores' requests interleave
in each bank, and addresses are often interleaved across banks at cache-block
granularity. The energy spent sensing and latching the rest of the row is
therefore mostly wasted.

Reads in phase-change memory (PCM), STT-RAM and resistive RAM do not destroy
the stored value. Nothing has to be restored after a read, so there is no
reason to latch the whole row. This design swaps two stages of the bank data
path:

```
  DRAM bank:  array --> row buffer (1 KB) --> column mux --> I/O
  NVM  bank:  array --> column mux --> row buffer (RB_BYTES, e.g. 64 B) --> I/O gating --> prefetch buffer --> pins
```

Each sense amplifier of the small row buffer is shared by several bitlines of
the same row. An access senses only one *segment* of `RB_BYTES`. Reads and
writes use the same row-buffer path, as in DRAM. The pins and command
encodings stay those of DDR3. The SystemVerilog here models one x8 chip of
this kind: its command decoding, banks, row buffers, shared I/O path and
timing rules.

## The access protocol: the address arrives the other way round

A bank needs both the row and the segment before it can sense anything, so the
address is sent in a different order from DRAM:

| command   | pins (DDR3 encoding)   | address pins carry        | what the chip does |
|-----------|------------------------|---------------------------|--------------------|
| PRECHARGE | RAS#, WE# low          | row, `A[13:0]`            | stores the row in the bank's row register. Nothing else: no bitlines to precharge. |
| ACTIVATE  | RAS# low               | column, `A[9:0]`          | senses segment `{row register, column[9:6]}` and loads it into the row buffer when sensing ends |
| READ      | CAS# low               | column, `A[9:0]`          | moves 8-byte block `column[5:3]` of the bank's row buffer to the pins |
| WRITE     | CAS#, WE# low          | column, `A[9:0]`          | moves 8 bytes from the pins into block `column[5:3]` of the row buffer; the block is written back to the array tWR later |

These bit positions assume the defaults: a 1 KB row and 64 B segments, on an
x8 chip with 8-beat bursts. `column[2:0]` is the byte within the burst and is
ignored. Because A10 is an ordinary row bit, there is no precharge-all.
Refresh and the other DDR3 commands are decoded but ignored: a non-volatile
memory has no refresh. A row-buffer *hit* is a READ or WRITE to a segment that
is already open. It needs no PRECHARGE or ACTIVATE. A miss costs a PRECHARGE
followed at once by an ACTIVATE (tRP = 0), and then tRCD.

PRECHARGE only moves an address, and the sense amplifiers are separate from
the latches. So the rules that protect a DRAM precharge disappear: tRP
(PRECHARGE to ACTIVATE) and tRTP (READ to PRECHARGE) are both zero. Two other
rules, tRRD and tFAW, limit how fast ACTIVATEs may follow each other, for
peak-power reasons. Both shrink in proportion to the number of bits sensed.
With a 64 B row buffer, an ACTIVATE senses 1/16 of what a DRAM ACTIVATE
senses.

## Timing

The clock period is 1.875 ns (DDR3-1066). Each NVM timing value is the DDR3
value scaled by a technology ratio relative to DRAM: alpha for read energy,
gamma for read latency, delta for write latency. The activation-rate limits
are also scaled by `RB_BYTES / ROW_BYTES`. Every value is rounded up to whole
cycles:

| rule  | between                    | formula                        | default (PCM, 64 B) |
|-------|----------------------------|--------------------------------|---------------------|
| tRCD  | ACTIVATE -> READ/WRITE     | 8 * gamma                      | 24 |
| tWR   | end of write burst -> PRECHARGE | 8 * delta                 | 40 |
| tRRD  | ACTIVATE -> ACTIVATE (any bank) | 4 * alpha * RB/ROW        | 1 (0.5 rounded up) |
| tFAW  | window holding at most 4 ACTIVATEs | 20 * alpha * RB/ROW    | 3 (2.5 rounded up) |
| tRP   | PRECHARGE -> ACTIVATE      | 0                              | 0 |
| tRTP  | READ -> PRECHARGE          | 0                              | 0 |
| CL    | READ -> first data         | DDR3-1066                      | 8 |
| CWL   | WRITE -> first data        | DDR3-1066                      | 6 |
| tBURST| one burst of 8 beats       | BL/2                           | 4 |

The ratios are top-level parameters, in hundredths: `ALPHA_X100`,
`GAMMA_X100` and `DELTA_X100`. The defaults describe PCM: alpha = 2 (twice
DRAM's read energy), gamma = 3 and delta = 5. The published PCM ranges are
alpha 2–8, gamma 3–6 and delta 5–30. The gamma and delta defaults are the low
ends of those ranges, because no single value is singled out. For STT-RAM-like
parts use ratios near 1 (each range is 0.5–2). The chip works out every cycle
count itself (`nvm_pkg::ceil_scale`).

Cycle by cycle, counted in rising edges from the edge that samples the
command:

```
edge  0   ACTIVATE sampled
edge  1   bank sees the decoded command, starts sensing
edge  T_RCD   row buffer loaded (rb_valid rises)  -> a READ sampled here is legal
READ sampled at edge k:  dq_out/dq_oe carry beats 0,1 in the cycle starting at edge k+CL,
                         beats 2,3 in the next ... for tBURST = 4 cycles
WRITE sampled at edge k: beats 0,1 must be on dq_in in the cycle starting at edge k+CWL,
                         ... for 4 cycles; the block enters the row buffer at edge k+CWL+5,
                         and is written to the array tWR edges after that
```

The double-data-rate data bus is modelled at the clock rate. Each clock cycle
carries two beats side by side: `dq[0]` is the rising-edge beat and `dq[1]`
the falling-edge beat. Read and write data use separate ports (`dq_out` with
`dq_oe`, and `dq_in`). A bidirectional pad cell would merge them; the pads are
not part of this model.

## The bank: sensing, latching and writing back

Each `nvm_bank` holds three address registers:

* the **row register**, written by PRECHARGE;
* the **open row/segment**, copied from the row register and the ACTIVATE's
  column when sensing starts. This is the address the row buffer belongs to;
* the sensing and write-back counters.

**Sensing.** The sense amplifiers release as soon as sensing completes, and
the data sit in separate latches from then on. The model uses a counter for
this: the array is read synchronously while the counter runs, and the row
buffer is loaded when the counter expires. A READ that keeps tRCD sees the new
data. A READ that breaks tRCD sees the previous segment, and the monitor
flags it.

**Writing.** A WRITE puts its 8-byte block into the row buffer latches and
marks that block dirty. tWR after the last block arrived, every dirty block
is written from the row buffer into the array, at the open row and segment,
and the dirty bits clear. Only written blocks go back: the write-back works at
block level. If another block arrives before the timer expires, the timer
restarts. The DDR rule "no PRECHARGE within tWR of a write" exists precisely to
keep the row register stable during this write to the array. Holding the
write-back address in the separate open-row register makes the bank safe
anyway. If an ACTIVATE arrives while blocks are still dirty, they are written
back immediately, at their own address, before the new segment is sensed.

**The array** (`nvm_bank_array`) is `RB_BYTES/8` independent memories, one
per 8-byte block position of a segment ("lane"). All of them are indexed by
`row * SEGS + segment`. Indexing by row stands in for the row decoder, and
the segment index stands in for the column multiplexer in front of the sense
amplifiers. Sensing reads every lane at once. Write-back writes the dirty
lanes only. The cells are plain storage. The eight subarrays per bank of the
evaluated system are not modelled separately, since they would not change the
behaviour at the pins.

## The shared I/O path

One I/O path serves all banks, as in a DRAM chip:

* `nvm_io_control` carries each READ and WRITE through a shift register. It
  produces three strobes: *fetch* one cycle before the first read beat,
  *capture* during the four write-beat cycles, and *commit* in the cycle after
  the last write beat. Commands may follow each other every tBURST cycles.
  Bursts from different banks then run back to back without a gap: open
  several banks, then READ each of them four cycles apart.
* `nvm_io_gating` is the second column multiplexer. It selects bank and block
  for a read, and enables one bank for a write. When the row buffer is one
  block wide (`RB_BYTES = 8`), the block select disappears.
* `nvm_prefetch_buffer` holds one chip's 8 bytes of a 64-byte cache block
  (eight x8 chips per rank). It shifts them out as 8 beats, byte 0 first, and
  assembles 8 write beats the same way.

## The timing monitor

A DDR device does not police its controller, but these timing rules are the
heart of the protocol. `nvm_timing_checker` therefore watches the decoded
command stream and raises a flag in the cycle of any command that breaks
tRCD, tWR, tRRD, tFAW, tRP or tRTP. It also flags a READ or WRITE to a bank
whose row buffer holds a different segment, or nothing at all. The flags come
out of the chip as `viol`. With tRP = tRTP = 0 the `rp` and `rtp` flags can
never rise. They are kept so the same monitor works with DRAM-like
parameters.

## Files

| file | contents |
|------|----------|
| `rtl/nvm_pkg.sv` | command and violation types, `ceil_scale` |
| `rtl/nvm_chip.sv` | top: one x8 chip |
| `rtl/nvm_cmd_decoder.sv` | DDR3 pins -> registered command |
| `rtl/nvm_bank.sv` | row register, sensing and write-back control |
| `rtl/nvm_bank_array.sv` | cell array with row decoder and segment multiplexer |
| `rtl/nvm_row_buffer.sv` | row-buffer latches and dirty bits |
| `rtl/nvm_io_control.sv`, `rtl/nvm_io_gating.sv`, `rtl/nvm_prefetch_buffer.sv` | shared I/O path |
| `rtl/nvm_timing_checker.sv` | timing-rule monitor |
| `tb/tb_<module>.sv` | a self-checking testbench per module |
| `tb/tb_nvm_chip.sv` | end-to-end test with a rule-keeping controller model |
| `tb/tb_nvm_chip_full.sv` | the chip at its full default size |
| `tb/tb_nvm_rb_sweep.sv`, `tb/nvm_sweep_unit.sv` | the same access stream on chips with 8 B, 64 B and 1 KB row buffers, plus a 64 B chip with STT-RAM timing |

The chip's parameters are `BANKS` (8), `ROWS` (16384 per bank), `ROW_BYTES`
(1024), `RB_BYTES` (64), `IO_WIDTH` (8), `BURST_LEN` (8), the three ratios,
`T_CL` and `T_CWL`. Sixteen such chips make the 2 GB memory of the evaluated
system: 2 channels, each with one rank of eight x8 chips. `RB_BYTES` may be
any power of two from 8 to `ROW_BYTES`. The column address must fit `A[9:0]`
and the row `A[13:0]`, which limits a chip to 16384 rows per bank and 8
banks. `IO_WIDTH` of 4 or 16 (x4 and x16 parts) changes the block to 4 or 16
bytes. Only x8 has been simulated; for x16, `RB_BYTES` must be at least 16. A
rank is eight chips side by side, sharing the command pins and each
contributing one byte lane of the 64-bit data bus. It needs no logic of its
own, so no rank module is provided. The default array holds 128 MB per chip in memories of 64-bit words.
Synthesis tools keep it as memory cells, and a simulator needs about that much
memory.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    --top-module tb_nvm_chip rtl/nvm_pkg.sv tb/tb_nvm_chip.sv -o sim
obj_dir/sim
```

Replace `tb_nvm_chip` with any other testbench name. The simulator is
two-state. The testbenches do not depend on the array's initial contents:
they write before they read, or they learn what they read first.

`tb_nvm_chip` runs about 300 random reads and writes, then reads everything
back through fresh ACTIVATEs, then interleaves eight banks, then breaks each
rule on purpose. It uses 64 rows per bank, and alpha = 8 so that tRRD and
tFAW do hold commands back. It counts every mechanism (hits, misses, the
ACTIVATE right after PRECHARGE, write-backs on time and forced ones, seamless
bank interleaving, each timing wait and each flagged rule) and fails if one
never happened. `tb_nvm_chip_full` runs the chip at its full default size:
accesses to the first and last rows, write-back after tWR, and reading back
from the array, with the tRCD and CL latencies checked to the cycle.

## How far it goes, and where it departs

Taken from the architecture: the swapped column multiplexer and small row
buffer, the separate latch stage, PRECHARGE carrying the row and ACTIVATE the
column, a single data path for reads and writes, the write to the array after
the burst, block-level write-back of dirty data, the timing formulas above,
the 8-byte prefetch buffer, the x8 interface, the 8 banks, and the 1 KB row.

Choices made here, where the architecture leaves things open:

* the DDR3 encodings and address-pin assignment, and `column[5:3]` selecting
  the block inside the segment;
* CL = 8 and CWL = 6 (DDR3-1066);
* the default gamma and delta;
* 16384 rows per bank, derived from a 2 GB memory of sixteen chips;
* the counter model of sensing and its alignment (the row buffer is ready
  exactly tRCD after ACTIVATE);
* the tWR timer restarting on every write;
* the immediate write-back on ACTIVATE;
* the two-beats-per-cycle data ports;
* byte 0 as the first beat;
* the open-segment rule of the monitor;
* a tFAW limit of four ACTIVATEs.

Not modelled: the analog parts. These are the current-mode sense amplifiers,
the write drivers, the cell physics, and the pads and DLL of the DDR
interface. The memory controller is not modelled either: its FR-FCFS
scheduler, request queues and address mapping belong to the host. The
testbenches stand in for it with a simple in-order controller.

The energy model that motivates the design is an evaluation model, not
hardware: ACTIVATE at 0.3·alpha pJ/bit of row buffer, READ 19 pJ/bit, WRITE
24.2 pJ/bit, and write to array 0.3·beta pJ/bit. No hardware computes it, but
`tb_nvm_rb_sweep` runs the same command streams on chips with 8 B, 64 B and
1 KB row buffers and prints the energy those numbers give (PCM, alpha = 2,
beta = 100). It checks the hit counts against the geometry.

* In a sequential stream every sensed byte is used. The hit rate grows with
  the row buffer (0 %, 87.5 % and 99.2 %), while the activation energy stays
  the same (39 nJ).
* In a pseudo-random stream of 256 reads there is little locality. The
  activation energy falls steeply with the row buffer: about 10, 77 and
  664 nJ, with read-burst energy of 311 nJ on top.
* A fourth chip has a 64 B row buffer with STT-RAM-like ratios (alpha =
  gamma = delta = 1, so tRCD = tWR = 8 cycles). It gives the same counts
  as the PCM chip, but finishes the streams in 20475 cycles instead of
  28523.

This is the effect the design is built for. These are small synthetic
streams; they do not reproduce the multi-core workloads (SPEC CPU2006, TPC
and STREAM mixes on eight cores) used to evaluate the architecture.
