# SAGe read-reconstruction hardware in SystemVerilog

Genome analysis pipelines spend a surprising share of their time before the
analysis starts: they read compressed sequencing data from storage and turn it
back into plain reads. SAGe attacks this with a compressed format that small
hardware can decode while it streams. A read set is stored as a **consensus
sequence** plus, for every read, where the read sits on the consensus and how
it differs from it. The differences are substitutions, insertions, deletions
and a few special cases. All of this lives in a handful of flat **arrays**, and
each array is read strictly in order. Decoding therefore needs no large
buffers and no random access. It needs a few 8-bit registers, one register the
length of a short read, and simple compare/copy logic. That is small enough to
put one decoder beside every channel of an SSD.

This repository holds RTL for that decoder: one channel (Scan Unit, Read
Construction Unit, Control Unit and the double registers) and an eight-channel
top. It also holds self-checking testbenches with a software encoder that
produces test data in the same format.

## How a read is described

For each read, the compressed data holds:

* **Matching position**: where on the consensus the read starts. Reads are
  sorted by position, so only the difference to the previous read's position
  is stored.
* **Mismatch count**: how many places the read differs from the consensus.
* For each mismatch, in read order:
  * its **distance** from the previous mismatch, counted in matching bases
    that are simply copied from the consensus;
  * its **base** and, when needed, its **type**.
* For an insertion or deletion (indel), its **length**.

Numbers come in many sizes. Storing all of them at the width of the largest
would waste space. Each kind of number therefore gets a small table of
allowed bit widths, the *association table*, tuned per read set. Next to each
value array sits a **guide array** that names the width of every entry with a
prefix code: `0` is the first table entry, `10` the second, `110` the third,
and so on.

| Array | Holds |
|---|---|
| MPGA (matching-position guide array) | width codes of the position deltas |
| MPA (matching-position array) | the position deltas; the per-read lengths for variable-length reads |
| MMPGA (mismatch-position guide array) | width codes; the mismatch counts themselves; the one-bit short/long indel flags |
| MMPA (mismatch-position array) | mismatch distances; 8-bit long indel lengths |
| MBTA (mismatch base/type array) | mismatch bases, insertion/deletion bits, inserted bases, corner-case flags |
| configuration header | read count, read length, the three association tables |

### Telling substitutions from indels without a type field

A substitution must change the base. So the MBTA first stores only the base
(2 bits). The Read Construction Unit compares it with the consensus base at
the cursor:

* If they differ, it is a substitution, and nothing more is stored.
* If they are equal, it must be an indel. One more bit says insertion (`0`) or
  deletion (`1`). The Scan Unit is told, and fetches the length:
  * one MMPGA bit; `0` means length 1, the most common case;
  * `1` means an 8-bit length follows in the MMPA.
* An insertion of length L is followed by its L bases in the MBTA.
* A deletion of length L skips L consensus bases.

### Corner-case reads

A read can hold an unknown base `N`, which needs a fifth symbol. Such a read
is marked by a first mismatch at distance 0. For that entry only, the MBTA
holds one flag bit:

* `1`: the read is a corner case. The entry produces no base. From then on,
  every MBTA base in the read is 3 bits wide, so `N` (code 4) can be stored.
* `0`: it is a real mismatch at position 0.

Ordinary reads never pay for the marker. Clipped read ends are carried as
insertions.

### Worked example

The consensus begins `ATACGTAGAAAAAGTCGATG...`. The read `AGCAAATGTACGATG`
matches from position 6, counting from 0. It is encoded as:

| Stored | Meaning |
|---|---|
| distance 2 | copy `AG` |
| base C | differs from consensus `A`: substitution |
| distance 3 | copy `AAA` |
| base T | substitution |
| distance 2 | copy `GT` |
| base C | equals the consensus `C`: indel |
| type bit 0 | insertion |
| length flag 0 | length 1 |
| base A | the inserted base |

Then the tail `CGATG` is copied up to the read length of 15. The testbench of
the Read Construction Unit rebuilds exactly this read.

## Bitstream format used by this RTL

All arrays are packed MSB first into bytes. Each array arrives on its own byte
stream (valid/ready).

**Configuration stream**, byte by byte:

| Bytes | Field |
|---|---|
| 4 | `NUM_READS`, big-endian |
| 2 | `READ_LEN`, big-endian. 0 selects variable-length mode: each read carries a 16-bit length in the MPA, right after its position delta. |
| 1 + K | matching-position width table: K (1..8; 0 is read as 1), then K widths (0..16 bits each) |
| 1 + K | mismatch-count width table |
| 1 + K | mismatch-distance width table |

**Prefix codes**: table entry *i* is written as *i* ones then a zero. With
K = 1 no prefix bits are stored at all.

**Per read**:

1. MPGA code, then MPA delta (that many bits); position = previous position + delta.
2. Variable-length mode only: 16-bit read length from the MPA.
3. MMPGA code, then the mismatch count, read from the MMPGA itself.
4. For each mismatch:
   1. MMPGA code, then the MMPA distance;
   2. the MBTA entry described above;
   3. for indels, the length flag and optional 8-bit length.
5. The rest of the read is copied from the consensus.

**Consensus**: 2 bits per base (A=0, C=1, G=2, T=3). There are 32 bases in a
64-bit word, base *i* in bits `[2i+1:2i]`. Words are fetched by word address.

**Output**: one byte per base in a 150-lane chunk, with `out_count` valid lanes.
`out_last` is set on the chunk that ends a read.

| Format | A | C | G | T | N |
|---|---|---|---|---|---|
| `FMT_2BIT` | 0 | 1 | 2 | 3 | 0 |
| `FMT_3BIT` | 0 | 1 | 2 | 3 | 4 |
| `FMT_ASCII` | `A` | `C` | `G` | `T` | `N` |
| `FMT_ONEHOT` | 0001 | 0010 | 0100 | 1000 | 0000 |

## The units

```
           cfg  MPGA MPA MMPGA MMPA                 MBTA
             \    \   |   /    /                     |
             +-----------------+  tokens (read / mismatch)   +----------------------+
  command -> | Scan Unit (SU)  | --------------------------> | Read Construction    | -> 150-base
     |       |  4 bit readers  | <-- verdict: indel? ------- | Unit (RCU)           |    chunks
     v       |  + config regs  | --- indel length ---------> |  MBTA bit reader,    |
  +------+   +-----------------+                             |  150-base register   |
  |  CU  |  start/clear, read count, done                    +----------------------+
  +------+                                                        | base lookup
                                                       +-----------------------+
                                      consensus words ->| double registers 2x64 |
                                                       +-----------------------+
```

### Bit readers (`sage_bitreader`)

Every array goes through the same front end. It has an 8-bit register holding
the current byte and an accumulator into which bits are shifted one per cycle.

* A field of *n* bits (0..16) is requested with `rd_req`/`rd_n`.
* It is answered with a one-cycle `rd_done` *n*+1 cycles later. It takes one
  cycle more when the byte register happened to be empty.
* The next byte is pulled in the same cycle the last bit of the current one is
  used.
* Bytes are only pulled while a field is pending. Nothing is read ahead of a
  command, and `clear` loses nothing that was not meant for the old read set.

### Scan Unit (`sage_scan_unit`)

A single state machine drives four bit readers: MPGA, MPA, MMPGA and MMPA. A
fifth path reads the configuration.

* **Loading the configuration.** It fills the read count, the read length and
  the three width tables (up to 8 entries each).
* **Decoding.** It walks the per-read steps above. For each read it emits a
  read token `{pos, len, count}`, then one mismatch token `{gap}` per mismatch.
  The mismatch counter counts down, and a new count is fetched when it reaches
  zero.
* **Indel verdicts.** After each mismatch token the SU waits for the RCU's
  verdict. Only an indel makes it read the length flag and the optional 8-bit
  length.

This back-and-forth is what keeps the MBTA free of a per-mismatch type field.
It also means the SU can run at most one mismatch ahead of the RCU.

### Read Construction Unit (`sage_read_construction_unit`)

The RCU keeps a consensus cursor and a 150-entry register of 3-bit bases.

* **Tokens.** A read token sets the cursor. A mismatch token copies `gap`
  consensus bases into the register, one per cycle, then decodes the MBTA entry
  as described above.
* **Bases out.** Substituted and inserted bases go into the register in place
  of consensus bases. Deleted consensus bases are skipped by moving the cursor.
* **Chunks.** When the register is full and another base is ready, the
  150-base chunk is offered downstream, and the RCU stalls until it is taken.
  The chunk that ends a read is offered with `out_last`, whatever its size.
  Reads longer than 150 bases, such as long reads, therefore leave as several
  chunks.
* **Formatting.** The format is applied combinationally on the way out, so the
  stored bases stay format-independent.
* **Consensus port.** The RCU asks for one consensus base per cycle
  (`cons_req`/`cons_addr`) and proceeds when `cons_hit` says the base is
  available.

### Double registers (`sage_double_reg`)

Two 64-bit registers hold consensus words, each tagged with its word address.

* A lookup that hits either register is answered in the same cycle.
* While the RCU reads from one register, the next word is requested into the
  other. A sequential scan therefore never waits, except at the very first word
  of a jump.
* A lookup that misses both registers requests its word into the register not
  in use.
* Only one request is outstanding at a time, and any memory latency is fine.

### Control Unit (`sage_control_unit`)

The CU handles the read command:

1. It takes a read command (`CMD_SAGE_READ`) and latches the requested output
   format.
2. It clears the channel for one cycle and starts the SU.
3. It counts finished reads: the last chunk of a read accepted downstream.
4. It raises `done` once the SU has decoded every read in the header and that
   many reads have left the RCU.

A command that arrives while a read set is being decoded is held off. Other
opcodes are ignored.

### Channel and top (`sage_channel`, `sage_top`)

* `sage_channel` wires one CU, SU, RCU and double-register pair together.
* `sage_top` instantiates `NUM_CH` = 8 channels. One command goes to all of
  them, and `done` is the AND of the per-channel done flags.
* Each channel has its own array byte streams, consensus word port and output
  chunk port. In an SSD these connect to the flash channel controller and to
  the analysis hardware. Both sit outside this RTL.
* Per-channel event strobes (substitution, insertion, deletion, corner-case
  read) are brought out for counting.

## Timing and size

* **Throughput.** One output base per cycle and channel while copying. Each
  mismatch adds its MBTA bits plus a few handshake cycles. Measured in
  simulation: 8 reads of 150 bases without mismatches take about 1330 cycles,
  which is about 1.1 cycles per base. With typical short-read mismatch rates
  it is somewhat slower.
* **Latency of a field.** An *n*-bit array field costs *n*+1 cycles. The SU's
  arrays are read one after another, not in parallel. That is enough, because
  the RCU's one-base-per-cycle copy dominates.
* **Size.** After yosys coarse synthesis, one channel is about 2,600
  word-level cells and 1,300 flip-flops. Most of the flip-flops are the
  150 x 3-bit read register. The eight-channel top is about 21,000 cells and
  10,500 flip-flops.

## How far this follows the published design

**Taken from the published description:**

* the three units and their roles, plus the per-channel double registers;
* 8-bit array and configuration registers;
* the 150-base read register, and chunking of longer reads;
* guide arrays with prefix codes 0/10/110/...;
* delta-coded matching positions;
* mismatch counts in the mismatch guide array;
* detecting indels by comparing the stored base with the consensus, plus one
  insertion/deletion bit;
* the indel signal from the RCU back to the SU;
* the one-bit short/long indel flag and the 8-bit long length;
* the position-0 corner-case marker with one flag bit;
* the output formats (2-bit, 3-bit, ASCII, one-hot);
* two 64-bit double registers;
* eight channels.

**Chosen here, where the description gives no detail:**

* the configuration byte layout;
* mismatch positions stored as distances (gaps) rather than offsets;
* the order of the MBTA fields, with inserted bases stored right after the
  type bit;
* 3-bit bases for corner-case reads;
* field widths up to 16 bits;
* 16-bit read lengths;
* consensus packing;
* the tag/prefetch policy of the double registers, and using them for the
  consensus stream;
* all handshakes;
* the command interface.

**Not built:**

* **Chimeric reads.** These are reads rebuilt from several matching positions.
* **Reverse-complement reads** (a "reverse" bit per read).
* **Unmapped reads.**

  The description names these three features but gives no bit layout for them.

* **Everything outside the decoder:**
  * quality-score decompression, which runs in host software in the original
    design;
  * the compressor;
  * flash translation layer and data-layout changes;
  * the write command;
  * PCIe/CXL links;
  * the flash controller;
  * the analysis accelerator.

**Known limits:**

* **Read length.** A read must be shorter than 65,536 bases. Some nanopore
  read sets contain longer reads.
* **Throughput.** It is about one base per cycle per channel, which is about
  7 G bases/s for eight channels at 1 GHz. The published decompression
  throughput is about ten times that. Matching it would need several
  consensus bases copied per cycle, which this RTL does not do.

## Simulating

All RTL is in `rtl/` and all testbenches are in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and stops itself, with a watchdog. Example with
plain Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_sage_top \
    -y rtl -y tb rtl/sage_pkg.sv tb/sage_tb_pkg.sv tb/tb_sage_top.sv
./obj_dir/Vtb_sage_top +verilator+rand+reset+2
```

| Testbench | What it exercises |
|---|---|
| `tb_sage_bitreader` | random field widths, back-to-back requests, clear, field latency |
| `tb_sage_scan_unit` | the count `0011` / code `10` example plus random read sets; every token and indel length |
| `tb_sage_read_construction_unit` | the worked example above plus random read sets in all four formats; the SU and the consensus are modelled |
| `tb_sage_double_reg` | sequential, short-jump and random lookups; the sequential scan must hit almost every cycle |
| `tb_sage_control_unit` | command acceptance, clear/start pulses, format latch, read counting, done |
| `tb_sage_channel` | one full channel on random short and long read sets, with stalls on every stream, plus a rate check |
| `tb_sage_top` | all eight channels at default parameters, two commands. It counts every mechanism (substitution, insertion, deletion, long indel, corner case, chunk split, consensus fetch, output back-pressure, format change) and fails if one never occurs. |

**Test data.** `tb/sage_tb_pkg.sv` holds the encoder. It draws a random
consensus, then random reads with substitutions, short and long indels, `N`
bases and corner-case markers. It picks width tables, packs every array, and
records the expected tokens, verdicts and bases. `tb_byte_source` and
`tb_cons_mem` play the flash side with random stalls and latency.

**Changing the design.** `NUM_CH` on `sage_top` and `CHUNK` on
`sage_channel`/`sage_read_construction_unit` are parameters. The remaining
sizes are in `sage_pkg`:

* the 8-bit registers;
* the 8-bit long-indel length;
* up to 8 width classes;
* 16-bit fields;
* 32-bit positions;
* 64-bit double registers.
