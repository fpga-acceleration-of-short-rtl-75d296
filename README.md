# Short read alignment on an FPGA: reference lookup and Smith-Waterman arrays

A sequencer produces millions of short DNA or RNA fragments ("reads") of about
a hundred bases. Each read has to be placed on a reference genome of billions
of bases, while tolerating sequencing errors and real differences. The usual
approach has two stages:

1. **Find candidates.** Cut the read into seeds and look each seed up in a
   precomputed index. Every exact hit gives a *candidate alignment location*
   (CAL). Hits close to each other are merged.
2. **Score candidates.** Align the whole read against the reference around
   each CAL with Smith-Waterman (local alignment with affine gaps). Keep the
   best-scoring location.

This design gives stage 1 to the host processor. The index is large and its
lookups are memory-bound, and host memory has several times the bandwidth of
the FPGA board. Stage 2 goes to the FPGA, which is fast at dynamic programming.
The host streams each read followed by its CALs. The FPGA holds a copy of the
reference in its own DRAM, fetches the few hundred bases around each CAL, and
scores the read there on one of several systolic arrays. For each CAL it
returns the best score and where that alignment ends. The host then picks the
best CAL per read and writes the output.

The SystemVerilog here is the FPGA side. The host software (seed lookup, CAL
merging, choosing the best score), the board DRAM with its controller, and the
host link are not included. The top module exposes ports where they connect.

```
  host                          |  FPGA (sra_top)
                                |
  reads -> index lookup ->      |  host_rx -> ref_lookup <----> DRAM port (reference)
           CAL merging  --------+->           |   one job = read + CAL + section
                                |             v
                                |   sw_slot 0 .. sw_slot NUM_SW-1   (clock crossing +
                                |                                    sw_unit of READ_LEN PEs)
                                |             |
  best CAL per read <-----------+-  result_tx <
```

## Bases, reads and reference sections

* A base is 2 bits: A=00, C=01, G=10, T=11. The complement (A-T, C-G) is then
  the bitwise inverse. In any packed sequence, base k sits at bits [2k+1:2k].
* A read is `READ_LEN` = 100 bases (200 bits).
* The reference is stored 2 bits per base in 256-bit DRAM words of 128 bases.
  A CAL is a 32-bit base position, so up to 4.29 G bases can be addressed.
  The human genome, even with all known splice isoforms added, is about 3.5 G
  bases (0.9 GB).
* A CAL is taken to be the reference position of the read's first base. The
  host has already subtracted the seed's offset within the read. The
  reference *section* scored for a CAL starts at the boundary of the DRAM word
  holding the CAL. It is that one word (128 bases) if the read, placed at the
  CAL, ends inside the word (CAL mod 128 + 100 <= 128). Otherwise it is two
  words (256 bases).
* Each CAL carries a strand bit. A reverse-strand CAL means the read is the
  reverse complement of the reference there.

## The Smith-Waterman unit (`sw_unit`, `sw_pe`)

### What is computed

Let read base i (rows) be aligned against section base j (columns), with
scoring parameters match `a`, mismatch `b`, gap open `o` and gap extend `e`.
A gap of length k costs `o + (k-1)e`, so `o` includes the first gap base.

```
E(i,j) = max(H(i,j-1) - o, E(i,j-1) - e)        gap in the read
F(i,j) = max(H(i-1,j) - o, F(i-1,j) - e)        gap in the reference
H(i,j) = max(0, H(i-1,j-1) + (r_i == s_j ? a : -b), E(i,j), F(i,j))
```

H is zero outside the table. The unit's output is the largest H in the last
row (i = READ_LEN-1) and its column. That cell is where the best alignment
that uses the whole end of the read finishes. On ties the leftmost column
wins. The reported position is `section start + column`, a reference
coordinate.

E and F are kept saturated at zero. H is never negative, so a negative E or F
can never be the maximum, and the saturated recurrences give exactly the same
H. This keeps every value an unsigned `SCORE_W` = 12-bit number.

### How: a linear systolic array

There is one processing element (PE) per read base. PE i stores base r_i,
loaded in parallel before the section starts. Section bases enter PE 0 one
per cycle and move down one PE per cycle, carrying their H and F values.
PE i computes cell (i, j) one cycle after PE i-1 computed (i-1, j). At any
moment the active cells lie on one anti-diagonal of the table, and this
wavefront moves across the table from left to right. Each PE keeps three
registers:

* its own last H, which becomes the next cell's left neighbour;
* its own last E;
* the previous upstream H, which becomes the next cell's diagonal neighbour.

Every value a PE outputs is registered, so a PE adds one cycle and there is
no long combinational path along the array.

A `first` flag goes with column 0 of each section and clears the row state
of every PE as it passes. This is why a new section can follow the previous
one immediately. A `last` flag marks the final column. A tracker behind the
last PE keeps the running maximum and its column, and emits the result when
`last` arrives.

### Loading reads, lead-in and back-to-back sections

The whole read sits in the array, so two different reads cannot be in the
array at once. A job for a new read waits until the array has drained. The
read is then loaded in one cycle, and the section streams in. The result
appears after about S + READ_LEN cycles (S = 128 or 256). The READ_LEN part
is the lead-in: the time the last base takes to reach the last PE.

A job for the read already loaded, on the same strand, skips both steps. Its
first base enters PE 0 on the cycle after the previous section's last base.
A read with many CALs on one unit therefore costs S cycles per CAL.

For a reverse-strand CAL the unit loads the reverse complement of the read.
Reversing both sequences leaves the local-alignment score unchanged, so this
gives the same score as aligning the read against the reverse complement of
the reference. The reference stays in its stored form.

Each unit has a one-entry job buffer. A job can wait there while the
previous section streams. The unit reports which read it holds (`tag_*`), so
the dispatcher can steer later CALs of that read to it. A result that the
output side has not taken stops the whole array (a clock enable on every PE)
until it is taken.

Measured timing (one unit, S = section length): `res_valid` rises
S + READ_LEN + 2 cycles after a job is offered to an idle unit: 358 cycles
for S = 256. Back-to-back jobs of one read give one result every S cycles.

## Reference lookup (`ref_lookup`)

For each read-CAL job, `ref_lookup` issues one or two word reads, starting at
word `CAL >> 7`. The DRAM port is a valid/ready request with a 27-bit word
address, and responses come back in order, one `mem_rsp_valid` per word,
with no back-pressure. Requests are pipelined:

* Up to `OUTSTANDING` = 4 jobs are in flight at once, with their descriptors
  waiting in a FIFO.
* A credit counter caps the words requested but not yet consumed at
  2 x OUTSTANDING, which is the depth of the response FIFO. A response
  therefore always has room.
* When all words of the oldest job are back, the section is assembled into
  an output register.

Dispatch from that register works as follows. If a ready unit already holds
this read and strand, the job goes there, which avoids the lead-in.
Otherwise it goes to the next ready unit in round-robin order. All units
share the job bus, and `sw_valid` is one-hot.

## Host streams (`host_rx`, `result_tx`)

Input words are 128 bits, with the kind in bits [127:126]:

| kind | meaning | payload |
| --- | --- | --- |
| 01 | read header | [31:0] read id; followed by 2 words of bases (200 bits, first word low) |
| 10 | CAL | [32] reverse strand, [31:0] CAL |
| 00 | idle | ignored |
| 11 | invalid | dropped, `proto_err` pulses |

A CAL that comes before any complete read is also dropped and flagged.
`host_rx` copies the current read into every job, so later stages never look
back at the stream. It takes no input while a job waits, so the stored read
cannot change under it.

`result_tx` serves units with a waiting result in round-robin order, one per
cycle. It returns every result, unfiltered, as one word:

| bits | field |
| --- | --- |
| [31:0] | read id |
| [63:32] | CAL |
| [95:64] | best position (reference coordinate of the best last-row cell) |
| [107:96] | score |
| [108] | reverse strand |

The host groups results by read id. It can then keep the single best CAL,
the best few, or all CALs tied for best.

## Parameters

| name | default | where | meaning |
| --- | --- | --- | --- |
| `READ_LEN` | 100 | `sra_pkg` | read length = PEs per unit (the 100-base reads of the evaluation) |
| `WORD_BITS` | 256 | `sra_pkg` | DRAM word; 128 bases |
| `MAX_SEG_WORDS` | 2 | `sra_pkg` | longest section, 256 bases |
| `SCORE_W` | 12 | `sra_pkg` | score width |
| `NUM_SW` | 6 | `sra_top`, `ref_lookup`, `result_tx` | Smith-Waterman units |
| `OUTSTANDING` | 4 | `sra_top`, `ref_lookup` | DRAM jobs in flight |
| `META_DEPTH` | 4 | `sw_unit` | jobs in one array at once (2 are ever needed) |
| `JOB_DEPTH`, `RES_DEPTH` | 4 | `sw_slot` | clock-crossing FIFO depths (powers of 2, at least 4) |

The scoring values are the `cfg` input, not parameters: match, mismatch, gap
open and gap extend, of 4, 4, 5 and 4 bits. The testbenches use 1, 3, 7, 2,
which is match 1, mismatch 3, gap open 5 and extend 2 under the convention
that open does not include the first gap base. These are common defaults of
software aligners that use Smith-Waterman.

Six units fit the published per-FPGA rate. An array takes 256 to 356 cycles
per CAL, so at a 125 MHz array clock six units give 2.1 to 2.8 M CALs/s.
`READ_LEN` sets the array length. Reads of another length need a rebuild,
because the last row is fixed to the last PE.

## What follows the published design and what is chosen here

Taken from the published design:

* the split between host and FPGA;
* the 2-bit base code;
* 256-bit reference words, with one or two words per CAL depending on the
  word boundary;
* the linear array with one read base per PE, parallel read load and a
  streamed reference;
* affine-gap Smith-Waterman, with the best last-row cell as the output;
* no overlap between different reads, with a lead-in equal to the read
  length;
* the strand bit per CAL;
* several arrays fed by one reference lookup;
* returning all results to a host-side score tracker;
* six arrays, and up to four DRAM jobs in flight;
* arrays at 125 MHz and the rest at 250 MHz.

Chosen here, where the description gives no detail:

* all stream, DRAM-port and result formats, and all handshakes;
* the exact scoring convention, the tie rule and the score width;
* treating a CAL as the position of the read's first base;
* running sections of the same read back to back;
* reverse-complementing the read instead of the reference;
* the dispatch policy;
* pipelining the DRAM reads;
* stalling the array on output back-pressure;
* an asynchronous active-low reset;
* the clock-crossing method (asynchronous FIFOs of depth four).

## Two clocks (`sw_slot`, `async_fifo`)

The earlier version of this aligner ran the arrays at 125 MHz and everything
else at 250 MHz, because a PE does a long chain of additions and comparisons
in one cycle. The same split is kept here. `sra_top` has two clock inputs:

* `clk` (250 MHz) drives `host_rx`, `ref_lookup` and `result_tx`;
* `sw_clk` (125 MHz) drives the arrays.

Each array sits in an `sw_slot`, which adds two asynchronous FIFOs of depth
four. One carries jobs from `clk` to `sw_clk` and one carries results back.
They use Gray-coded pointers and two-flop synchronizers. The slot accepts a
job while its job FIFO has room, so up to four sections can wait for one
array. The slot records the read of the last job written into it, on the
`clk` side. The dispatcher reads this tag to send jobs for a held read back
to the same array. Because jobs run in the order they are written, the tag
is what the array will hold once it reaches that job. The scoring
configuration is treated as static and is not synchronized. Each domain has
its own reset, which must be released synchronously to its clock. The two
clocks may be the same clock.

## Verification

Each module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

* `tb_sw_pe` drives one PE with random inputs, random scoring parameters,
  stalls and column-0 markers. It checks every output against an integer
  model of the recurrences.
* `tb_sw_unit` checks every result against a full-table dynamic program
  (`sw_model` in the testbench). It uses:
  * exact copies of the section;
  * copies with substitutions, an insertion or a deletion;
  * reverse complements;
  * unrelated reads;
  * one- and two-word sections;
  * random output back-pressure.

  It also checks the new-read latency and the S-cycle spacing of back-to-back
  sections.
* `tb_host_rx` checks every job (id, strand, CAL, all bases) from a random
  stream with idle and malformed words, and counts the error pulses.
* `tb_ref_lookup` uses a DRAM model (`tb/dram_model.sv`: fixed latency,
  random request stalls). It checks the words, the section start and the
  one- or two-word choice of every job. It also checks:
  * one-hot dispatch to a ready unit only;
  * the preference for a unit holding the read;
  * that several reads are in flight.
* `tb_sw_slot` runs an array behind its clock crossing, with the two clocks
  at unrelated periods. It checks every result against the model, in order
  and without loss. It also checks that the read tag follows the last job
  written and that the job FIFO fills.
* `tb_result_tx` checks ordering per unit, that nothing is lost or
  duplicated, every field, and round-robin fairness.
* `tb_sra_top` runs the whole design at its default size: six units of 100
  PEs and a 32 K-base random reference.
  * Phase 1 sends 30 reads with true and decoy CALs on both strands, cut
    from the reference with errors. It checks each returned score and
    position against `sw_model_pkg`.
  * It runs `clk` at 250 MHz and `sw_clk` at 125 MHz.
  * Phase 2 sends one read with 120 CALs. It measured 268 array cycles per
    CAL per unit, against the 256 + READ_LEN allowed.
  * It counts each mechanism and fails if one never occurred: one-word and
    two-word sections, reverse strand, reuse of a loaded read, DRAM stalls,
    DRAM reads in flight, host back-pressure, all units working in parallel,
    and the protocol-error flag.

All seven pass. For each testbench, a copy of its module was broken on purpose
and run against it, and each testbench caught the fault. The faults:

* PE gap extension using the open cost;
* reverse-strand read not complemented;
* strand bit dropped;
* dispatch to a busy unit;
* fixed arbitration priority;
* results popped from the crossing FIFO without a ready consumer;
* the mismatch penalty wired wrong at the top.

Limits of the checking:

* The reference model is software written for these tests, not an existing
  aligner's output.
* Only the 2-state behaviour is simulated.
* No timing closure on an FPGA has been attempted.

## Simulating

The RTL is plain SystemVerilog-2017. With Verilator 5, from the directory
holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/sra_pkg.sv tb/tb_sra_top.sv --top-module tb_sra_top -o sim
./obj_dir/sim
```

Replace `tb_sra_top` with any other testbench name. The end-to-end run takes
well under a minute. `-Wno-fatal` keeps lint warnings (unused package
constants, the reset used both in flip-flops and in assertions) from stopping
the build. To change the read length, edit `READ_LEN` in
`rtl/sra_pkg.sv`. Every width and record follows from it, and the testbenches
adapt.
