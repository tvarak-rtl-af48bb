# Tvarak: a redundancy controller beside each LLC bank

With DAX (direct access), an application maps files that live on NVM
(non-volatile memory DIMMs) straight into its address space. It then
reads and writes them with ordinary loads and stores. The file system is no
longer on the data path, so it can no longer keep its per-page checksums and
its cross-DIMM parity up to date. It also cannot check data as it is read. A
firmware bug that loses a write, or puts it at the wrong address, then goes
unnoticed.

Tvarak moves that bookkeeping into hardware, at the point every DAX access
must pass: the boundary between the last-level cache (LLC) and the memory
controller. One small controller sits beside each LLC bank.

- On a fill of a DAX line, the controller checks the line against a
  per-line checksum.
- On a write-back of a DAX line, it updates three pieces of redundancy: the
  page checksum, the line checksum and the parity.
- Software stays in charge of policy. The file system tells the controller
  which physical pages are DAX-mapped and where their redundancy lives, and it
  handles the interrupt when a check fails.

The hardware stays cheap for two reasons:

1. **Checksums and parity are updated from diffs.** CRC is linear and parity
   is XOR. So the new checksum follows from the old checksum and
   `old_data XOR new_data`, and the rest of the page does not have to be read.
2. **Diffs and redundancy are cached.** The diff of a line is captured when L2
   writes the line into the LLC, since the LLC still holds the old copy then.
   The diff is kept in one reserved LLC way. Redundancy lines are kept in a
   4 KB cache inside the controller, with two reserved LLC ways behind it.

This RTL implements one such controller, with the sizes and latencies of the
evaluated system:

| Item | Value |
|---|---|
| LLC bank | 2 MB, 16 ways, 64 B lines, 27 cycles |
| On-controller cache | 4 KB, 1 cycle |
| Address range match | 2 cycles |
| Checksum or parity computation | 1 cycle |
| Reserved LLC ways | 2 of 16 for redundancy, 1 of 16 for diffs |
| NVM | 60 ns reads, 150 ns writes; 136 and 341 cycles at 2.27 GHz |

## The redundancy the controller maintains

There are three kinds of redundancy, each a 32-bit CRC-32C or a parity line:

| Redundancy | Covers | Where it is stored |
|---|---|---|
| system-checksum | one 4 KB page | on the page's own DIMM, 16 per 64 B line |
| DAX-CL-checksum | one 64 B line of a DAX-mapped range | in a per-range buffer, 16 per line |
| parity | one stripe of pages | the stripe's parity page, same line offset |

The DAX-CL-checksum exists only while the file is mapped. It lets a single
line be verified on a fill without reading its whole page.

### Address map

This address map is this design's own choice. Only its shape follows the
paper: RAID-5 with page striping, and neighbouring checksums sharing a line.

A line address is 34 bits (1 TB of NVM):

```
 33                 8 7    6 5            0
+--------------------+------+--------------+
|   row (26 bits)    | dimm | line in page |
+--------------------+------+--------------+
        \______ page number ______/
```

- Consecutive pages rotate over the four DIMMs.
- A *row* of four pages, one per DIMM, is a RAID-5 stripe.
- The parity page of row `r` is on DIMM `3 - (r mod 4)`. In row 0 it is on
  the last DIMM, and it moves one DIMM to the left for each following row.
  This follows the layout drawing of the paper.
- The parity line of a data line keeps the row and the line-in-page, and
  replaces the DIMM with the parity DIMM.

The system-checksum of the page at (row `r`, DIMM `d`) is word `r` of a
checksum region on DIMM `d`. That region starts at page row `csum_row_base`,
which the file system sets. Within the region:

```
sys_addr = { csum_row_base + r[25:10], d, r[9:4] }    slot = r[3:0]
```

So 16 consecutive pages of a DIMM share one checksum line.

Each DAX range entry gives `start_page`, `num_pages` and `clbuf_base`, the
first line of the range's DAX-CL-checksum buffer. With
`rel = (page - start_page) * 64 + line`:

```
cl_addr = clbuf_base + (rel >> 4)      slot = rel[3:0]
```

### Checksum arithmetic

CRC-32C is used with the Castagnoli polynomial `0x1EDC6F41`, computed MSB
first. Byte 0 of the line is bits [7:0] and is processed first, most
significant bit first. The initial value is all ones and the result is
XORed with all ones. The paper only names CRC-32C, so the bit order is this
design's choice.

Write `L(m)` for the CRC remainder of message `m` with a zero initial value
and no final XOR. `L` is linear over GF(2). For two messages of equal length
that differ by `D`:

```
crc(new) = crc(old) XOR L(D)
```

The initial value and the final XOR cancel out.

- **DAX-CL-checksum.** The message is one line, so the delta is
  `L(diff)`: the diff of the line run through the CRC from a zero state.
- **System-checksum.** The message is the whole page, and only line `k` of
  it changed. The page diff is the line diff followed by `63 - k` lines of
  zeros. Its remainder is:

  ```
  L(diff) * x^(512 * (63 - k)) mod P
  ```

  A constant table of the 64 powers `x^(512 * j) mod P` is computed when the
  design is elaborated. The delta is then one carry-less 32x32 multiply and
  reduction.

`csum_unit` computes three values in one registered cycle:

- the full CRC of a line, for verification;
- the line delta;
- the page delta.

Parity needs no unit: the new parity line is the old one XOR the diff.

## What happens to a request

The LLC bank controller sends one request at a time on the `req_*` port.
There are three kinds:

| Kind | Event | `req_data` | `req_old` |
|---|---|---|---|
| `REQ_FILL` | the LLC misses and fetches a line from NVM | – | – |
| `REQ_L2WB` | an L2 victim overwrites a line the LLC holds | new value | LLC's current copy |
| `REQ_WB` | the LLC evicts a dirty line | line | – |

Every request first goes through the range matcher, which takes 2 cycles.
Lines outside all DAX ranges go straight to NVM: a fill reads the line, and
a write-back writes it. An L2 write-back of such a line does nothing.

For DAX lines the controller does the following.

**Fill.**
1. Fetch the line's DAX-CL-checksum line (see "Redundancy lookup" below).
2. Read the data line from NVM.
3. Compute its CRC and compare it with the stored checksum.
4. If they differ, set `rsp_err` and pulse `irq` with `irq_addr`. The data is
   still returned. Recovery from parity is the operating system's job.

**L2 write-back.**
1. Compute the diff `old XOR new` and store it in the data-diff partition.
   If a diff for that line is already there, XOR into it.
2. If storing the diff evicts another line's diff, that other line must now
   be written back. Its new data is only in the LLC. So the controller
   *cleans* it:
   - It raises `clean_req_valid` with the line address and holds it until
     the bank controller answers.
   - The bank controller answers with `clean_rsp_valid` and the data, and
     marks the line clean.
   - The controller then writes the line back using the evicted diff, as
     below.

   A later eviction of that line from the LLC is then a clean eviction, and
   needs neither a diff nor a read of the old data.

**Write-back.**
1. Take the line's diff out of the diff partition. If there is none, read the
   old data from NVM and form the diff.
2. Compute both checksum deltas in one cycle.
3. Update, in this order, the system-checksum, the DAX-CL-checksum and the
   parity line. Each update fetches the line (see "Redundancy lookup"), XORs
   the delta into the right word, or the diff into the whole line, and puts
   the line back as dirty.
4. Write the data line to NVM.

### Redundancy lookup

A redundancy line is looked for in three places, in this order:

1. the on-controller cache (16 sets x 4 ways, LRU, 1 cycle);
2. the LLC redundancy partition (2048 sets x 2 ways, LRU, 27 cycles); a hit
   here is *taken* out of the partition;
3. NVM.

Wherever it was found, the line is (re)installed in the on-controller cache.

- Victims of the on-controller cache move to the LLC partition.
- Dirty victims of the LLC partition are written to NVM.

The two levels are therefore exclusive. Updated redundancy can stay cached
indefinitely. This relies, as the paper does, on backup power that flushes
the caches to NVM when power fails.

### Timing

All requests are serialised, and the NVM port has one access outstanding at
a time. Latencies are counted from the clock edge that accepts a request to
the cycle in which `rsp_valid` is high:

- a non-DAX fill takes `NVM read + 7` cycles;
- a DAX fill whose DAX-CL-checksum line is in the on-controller cache takes
  `NVM read + 14` cycles.

The extra 7 cycles of the DAX fill are the address generation, the on-controller cache access, the checksum and the compare.
The test bench checks both numbers exactly.

## Blocks

All files are in `rtl/`.

| Module | What it is | Timing |
|---|---|---|
| `tvarak_pkg` | Widths, line, address and range types, and the event vector. Also the CRC functions, including the table of `x^(512j) mod P`, evaluated at elaboration. | – |
| `range_matcher` | 16-entry table of DAX page ranges, written by the file system. Two stages: compare all entries, then pick the lowest matching index. | 2 cycles, one lookup per cycle |
| `redundancy_addr_gen` | The address map above. | combinational |
| `csum_unit` | Line CRC, line delta and page delta. | 1 cycle, registered |
| `red_cache` | Set-associative store with true LRU and lookup, write and take operations. Victims are returned on `evict_*`. | 1 cycle |
| `llc_partition` | `red_cache` sized to the reserved ways of a 2 MB 16-way bank, with a valid/ready handshake and the 27-cycle LLC latency. | 27 cycles |
| `tvarak` | The controller: one range matcher, address generator, checksum unit, 4 KB on-controller cache, and the two LLC partitions. A single state machine sequences them. The `ev` output pulses one bit per mechanism so that they can be counted. | see "Timing" |

More on `red_cache`:
- Its tag array holds one word per set, with the valid bit, dirty bit, age
  and tag of every way.
- Neither the tag array nor the data array has a reset, so both can map onto
  SRAM. After reset, a sweep of `SETS` cycles clears the tags, and `ready`
  rises when it is done.

## Simulating

Every block has a self-checking test bench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. With plain
verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module tb_tvarak -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/tvarak_pkg.sv tb/tb_tvarak.sv
./obj_dir/Vtb_tvarak
```

The end-to-end tests are `tb_tvarak` and `tb_tvarak_full`. Both share
`tvarak_tb_body.svh` and use the behavioural NVM model `nvm_model`. That
model has 136- and 341-cycle latencies and can be told to lose one write.

The test plays two roles:
- **File system:** it sets up a 32-page range with consistent checksums and
  parity.
- **LLC bank controller:** it issues random fills, L2 write-backs and LLC
  write-backs on a pool of DAX lines and on some non-DAX lines, and answers
  clean requests.

It checks the following:
- all fill data and the exact fill latencies;
- that a lost write is caught by the next fill, with `rsp_err` and `irq`;
- at the end, every checksum and parity word against values recomputed
  byte-serially from the expected data;
- in `tb_tvarak`, that each of the 15 mechanisms in `ev` happened at least
  once. It uses tiny caches (2x2 on-controller, 4-set partitions) so that
  every eviction path is reached.

`tb_tvarak_full` runs the same test at the default sizes, with the 4 KB
cache and 2048-set partitions, and no parameter overrides. There it only
prints the mechanism counts. The largest caches are slow to compile, about
a minute with verilator, but simulate in well under a second.

## Where this departs from the paper, and what is missing

- **No coherence between controllers.** The evaluated system has one
  controller per bank, 12 in all. They share redundancy lines through MESI
  coherence between their on-controller caches. Only one controller is built
  here. With several banks, two controllers could hold the same checksum
  line and update it independently. Adding the protocol needs a snoop or
  directory port that this design does not have.
- **No concurrency.** The controller handles one request at a time and keeps
  one NVM access outstanding. The paper does not say how much the hardware
  overlaps. The latencies of the individual steps do follow the paper.
- **Fallback when no diff is found.** A write-back that finds no diff reads
  the old line from NVM. The paper arranges for diffs always to exist, by
  cleaning lines whose diff is evicted, but says nothing about a missing
  one. In this model a missing diff occurs only for a line that was dirty
  before its range was registered.
- **Fixed parity scheme.** The paper lets the file system tell the controller
  its parity scheme. Here the scheme is fixed in hardware: RAID-5 over four
  DIMMs with rotating parity. Only the ranges and the checksum region are
  configurable.
- **Own choices where the paper is silent:**
  - the address map and redundancy placement;
  - the CRC bit order;
  - the on-controller cache organisation (4-way, LRU) and exclusive
    placement with the LLC partition;
  - the order of the three updates;
  - all interfaces;
  - the size of the range table (16 entries).
- **Modelled as separate arrays.** The LLC itself, the cores, the memory
  controller and the DIMMs are outside this RTL. The reserved LLC ways are
  modelled as separate arrays with the bank's geometry and latency, not as
  ways of a real bank.
- **Recovery is not in hardware.** After the interrupt, software rebuilds
  the page from parity. The hardware only detects the error.

## Changing it

- **Cache sizes and latency** are parameters of `tvarak`: `OC_SETS`,
  `OC_WAYS`, `BANK_BYTES`, `LLC_WAYS`, `RED_WAYS`, `DIFF_WAYS`, `LLC_LAT`
  and `NUM_RANGES`.
- **Widths and the checksum polynomial** are in `tvarak_pkg`.
- **The placement of redundancy** is entirely in `redundancy_addr_gen`. A
  different layout (more DIMMs, another parity rotation, another checksum
  region) only changes that module. The end-to-end test's reference layout
  functions (`sys_loc`, `cl_loc`, `par_loc`) must change with it.
