# FAT-PIM: a ReRAM dot-product accelerator that checks every analog read

A ReRAM crossbar computes a matrix-vector product in one analog step. Each
word line carries one bit of an input, each cell's conductance holds part of
a weight, and the current on each bit line is the sum of the selected cells.
The problem is that nothing in the result shows when a cell has drifted or an
ADC has glitched. ECC over the stored weights does not help, because the
weights are never read out digitally during a computation.

The idea here is to make every crossbar read check itself. When a word line
is programmed, the sum of its 128 data cells is also written, in a few extra
cells on extra "sum" bit lines on the same word line. Take any input pattern:
the current on the sum bit lines then equals the total of all data bit-line
currents, because summing along a row commutes with summing along a column.
One comparison per read, done digitally after the ADC, is therefore enough:

    sum over data bit lines of code(BL)  ==  sum over k of 4^k * code(sum BL k)

A mismatch means that some cell, S&H or ADC value on that read was wrong.
The operation is then stopped and the crossbar re-programmed from its
ECC-protected copy in the tile's eDRAM, and the operation re-run. A crossbar
that fails again is retired and the host is interrupted.

The cost is 5 extra bit lines per 128, and 5 more ADC conversions per read
(133 instead of 128 cycles).

## Organisation

    fatpim_chip            16 tiles, each with its own host port and irq
     └ fatpim_tile         42 MiB eDRAM + SEC-DED, registers, preparator,
        │                  controller, bus, 12 IMAs
        ├ tile_regs        host-visible registers and eDRAM window
        ├ tile_ctrl        command sequencing and the recovery policy
        ├ preparator       eDRAM -> IMA: ECC check, line sums, vectors
        ├ tile_interconnect one-entry request stage + status/result mux
        ├ edram, secded_enc, secded_dec
        └ ima              12 crossbars sharing 4 ADC channels
           ├ xbar_array    crossbar model: 128 WL x (128 + 5) BL, 2-bit cells
           ├ sample_hold   holds one read's 133 bit-line values
           ├ xbar_ctrl     runs the 16 reads of an operation, programs lines
           ├ adc_arbiter   binds a free channel to a crossbar for one operation
           ├ adc_sequencer walks a held sample, one bit line per cycle
           ├ adc           9-bit, one sample per cycle
           ├ shift_add     accumulates the 16 results of a crossbar
           ├ sum_checker   the per-read check above
           └ ima_output_regs results, done and error flags per crossbar

All constants and shared types are in `fatpim_pkg`. The defaults are the
main configuration: 128x128 crossbars of 2-bit cells, 16-bit weights and
inputs, 12 crossbars and 4 ADCs per IMA, 12 IMAs per tile, 16 tiles per
chip, a 42 MiB eDRAM per tile, and 9-bit ADCs at 1.28 GS/s. A system of
several chips is several `fatpim_chip` instances; the network between them
is not modelled.

One clock cycle is one ADC sample (0.78125 ns). A crossbar read is 100 ns
(`READ_LAT` = 128 cycles) and a word-line write is 200 ns (`WRITE_LAT` = 256).

## Data layout in a crossbar

A 16-bit weight takes 8 consecutive 2-bit cells of a word line. Bit line
`8c + s` holds bits `[2s+1:2s]` of weight `c`, so a word line holds 16 weights
(16 output columns). As a 256-bit vector, weight `c` is bits `[16c+15:16c]`,
and cell `j` is bits `[2j+1:2j]`.

The sum region is bit lines 128..132. Sum cell `k` holds bits `[2k+1:2k]` of
the line's cell sum, which is at most 128 x 3 = 384 and so needs 10 bits.

A bit line's read current is at most 128 x 3 = 384 and fits the 9-bit ADC
exactly. So one input bit is applied per read, least significant bit first,
and an operation is 16 reads. The code from bit line `8c + s`, read with
input bit `b`, is worth `code << (2s + b)` in column `c`. A 39-bit
accumulator per column holds the exact product of 128 16-bit pairs.

## Inside the IMA: sharing four ADCs among twelve crossbars

This is the busiest part of the design, and the timing matters:

* A crossbar that starts an operation asks the arbiter for a channel. A
  channel is an ADC, a shift-and-add unit and a sum checker together. The
  arbiter binds a free channel round robin, at most one binding per cycle,
  and the binding lasts for the whole operation (16 reads). This keeps the
  accumulators and the checker simple: one channel sees exactly one
  crossbar's codes.
* Each crossbar reads into its own sample-and-hold. The bound channel's
  sequencer then walks the 133 held values, one per cycle. During that time
  the crossbar has already started its next read (100 ns < 133 cycles). A
  new sample may be loaded in the same cycle that the old one is released, so
  a channel converts back to back with no gap.
* Each code carries a tag along the pipeline: bit line, input bit, first code
  of the operation, last code of a read and last read. `shift_add` and
  `sum_checker` act on the tag alone. When the last code arrives, the
  checker compares the two sums of the read (comparison valid 2 cycles
  after the code) and ORs the result into the operation's error flag.
* One operation on one crossbar takes `READ_LAT + 16 x 133` cycles plus a few
  cycles of pipeline: 2,256 + ~4 cycles at the defaults, as the IMA test
  checks. A fifth crossbar started together with four others waits for the
  first channel to free up, so it ends about one operation later.

`sum_checker` has a `THRESH` parameter (default 0, an exact match) for
analog models that are not exact; the behavioural crossbar here is exact.

## The tile: commands and recovery

The host talks to each tile over a small bus (`host_req_t`: valid, we, 32-bit
address, 64-bit data):

| address    | register                                                    |
|------------|-------------------------------------------------------------|
| 0 CMD      | write `[1:0]` op (1 PROGRAM, 2 INFER), `[5:2]` IMA, `[9:6]` crossbar, `[21:10]` crossbar mask |
| 1 ARG0     | weight base (PROGRAM) or input vector address (INFER)       |
| 2 ARG1     | result address (INFER)                                      |
| 3 STATUS   | `[0]` busy, `[1]` done, `[2]` error, `[3]` irq pending (write 1 to clear) |
| 4..9       | counters: sum-check failures, re-programs, faulty crossbars, ECC corrected, ECC uncorrectable, failed reads |
| 16+i       | faulty-crossbar map of IMA i                                |
| bit 31 set | eDRAM word `addr[22:0]`; writes are ECC-encoded, reads corrected |

Data in the eDRAM is 64-bit words, each stored with 8 SEC-DED check bits
(72,64). A weight line is 4 words, so crossbar weights are 512 words. An
input vector is 32 words; input `i` is bits `[16i+15:16i]`.

**PROGRAM** records the weight base in a per-crossbar table. The preparator
then reads the 128 lines, corrects or rejects each word, computes the
line's sum cells and sends the line to the IMA. The next line is fetched
while the crossbar is still writing. The command reports done once the
last line has been handed to the tile bus, between 126 and 128 write times
after it started; the crossbar finishes the last one or two writes on its
own, and an operation issued meanwhile waits for them.

**INFER** reads the vector once and starts one operation on every healthy
crossbar of the mask. The tile waits for all of them to finish. Each
crossbar whose check passed has its 16 results written to
`ARG1 + 16*crossbar + column`. For each crossbar that failed:

1. count the detection;
2. re-program the crossbar from its recorded base;
3. re-run the same vector on the failed crossbars only.

If a crossbar still fails after `MAX_RETRY` (1) re-runs, it is marked
faulty: it gets no further operations. The command then ends with the error
bit set, and `irq` rises until the host clears it. A double-bit ECC error
while fetching also ends the command with an error.

Inside the tile, eDRAM access priority is preparator, then result
write-back, then host. Host eDRAM access is refused (ready low) while a
command runs.

## What is modelled rather than designed

The crossbar with its 1-bit word-line drivers, the sample-and-holds and the
ADCs are analog. They are behavioural models with the real parts' ports:

* The crossbar returns exact integer bit-line sums. Device noise and IR drop
  are not modelled.
* The ADC is a one-cycle register.
* Test hooks let a testbench:
  * overwrite a cell (an abrupt resistance change), once or held, which
    makes the cell stuck;
  * XOR a mask into one ADC conversion;
  * flip bits of a stored eDRAM word.

The eDRAM is a plain synchronous array of 5,505,024 72-bit words per tile.
Not built:

* the application-specific units a tile may have (e.g. sigmoid, pooling);
* the chip-to-chip network;
* the host.

## Departures and choices

These are this design's own choices, where the source description leaves
the point open:

* Sum-cell bit order: low bits in the first sum bit line.
* Weight bit order: low bits in the lowest bit line.
* The ADC-channel binding lasts for a whole operation.
* The register map, the host bus and the command format.
* Results are zero-extended 39-bit values in 64-bit words.
* The retry limit of one.

Recovery always re-programs before the re-run. No attempt is made to tell a
transient ADC glitch from a cell fault: both are repaired the same way.

## Simulating

Every testbench in `tb/` is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/fatpim_pkg.sv \
        tb/tb_ima.sv --top-module tb_ima -o sim && obj_dir/sim

* `tb_ima` checks the products against a reference model, the 2,256-cycle
  operation, channel sharing among 6 crossbars, and detection of a changed
  cell and of an ADC glitch.
* `tb_fatpim_chip` runs 2 small tiles end to end through the host bus only.
  It must see each of these at least once:
  * an ADC-channel stall;
  * a sample waiting in an S&H;
  * a detection, re-program and successful re-run;
  * a stuck cell retired with an interrupt, and skipped by the next command;
  * a corrected and an uncorrectable eDRAM error.
* `tb_fatpim_chip_full` builds the chip at full size: 16 tiles of 12 IMAs,
  with 42 MiB of eDRAM each. It programs a crossbar in two tiles, runs an
  inference and checks the results and the command latency. It needs about
  1.1 GB of memory and a few minutes to build.

The other testbenches each cover one block. Latencies are parameters
(`READ_LAT`, `WRITE_LAT`), so small tests can use short ones.

## Lint notes

Verilator reports unused bits in a few places. These are unused package
constants, tag fields that a given consumer does not need, and the reset of
signals that are also checked in `disable iff` clauses of assertions. Each
module's header comment says which of these apply to it.
