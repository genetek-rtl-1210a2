# GeneTEK RTL: all-against-all edit distance with Myers's bit vectors

This accelerator computes the exact unit-cost edit distance (Levenshtein
distance, insertions, deletions and substitutions all costing 1) between every
query and every target of two DNA read sets. The aim is to pack as many cell
updates into each clock cycle as a mid-size FPGA allows. Two kinds of
parallelism do this:

* **Inside one comparison.** A query of up to `LMAX` bases is held as
  `LMAX`-bit vectors. Myers's bit-vector recurrence updates a whole column of
  the dynamic-programming matrix in one cycle. A pair therefore costs about as
  many cycles as the target has bases, whatever the length of the query.
* **Across comparisons.** `W` independent workers each run one pair. A scheduler
  hands out one new pair per cycle.

The memory traffic is kept small by buffering. Up to `BQ` queries (10 240 by
default) are read once into an on-chip buffer. Each target is then read once and
compared with every buffered query, one pair per cycle. The query buffer is
wide enough to return a whole query in one cycle, which is what keeps the
pair rate at one per cycle.

The default instance is the one the design is tuned for: `LMAX = 360` bases,
`W = 42` workers and `BQ = 10 240` queries. At that size a worker updates 360
cells per cycle and the array updates 15 120 per cycle. At a 220 MHz clock
that is about 3.3 tera cell updates per second.

## Dataflow

```
            AXI-Lite                   HP0 (32 b)                HP1 (32 b)
               |                           |                     |        ^
          ctrl_regs                seq_fetch (queries)   seq_fetch (targets)|
               |                           |                     |        |
               +----------------> reader: query_buffer [BQ] x {len, 2*LMAX bits}
                                           |   pair = {id, tlen, qlen, target, query}
                                         split  (round robin, 1 pair/cycle)
                                   /       |        \
                           stream_fifo  stream_fifo  stream_fifo   depth 2
                           myers_worker myers_worker myers_worker  x W
                           stream_fifo  stream_fifo  stream_fifo   depth 2
                                   \       |        /
                                         merge  (round robin, 1 result/cycle)
                                           |   result = {id, score}
                                         writer ---------------------------> HP1 writes
```

Every stage is joined to the next by a valid/ready stream. A stage moves data
only when its input has data and its output has room. Back-pressure from the
memory port on the write side therefore stalls the whole chain without losing
anything.

## Memory image and register interface

The host puts both read sets in system memory as ASCII and programs the
registers. Everything about this layout is this design's own choice; only
"ASCII in memory, 2-bit codes inside" comes from the original description.

* **Sequence record.** One 32-bit length word, then the characters packed four
  per 32-bit word, with the first character in the low byte. Records are
  `4 * (1 + ceil(LMAX/4))` bytes apart (364 bytes at `LMAX = 360`), so record
  `i` starts at `base + i * stride`. Lengths above `LMAX` are cut to `LMAX`.
* **Character codes.** A = 00, C = 01, T = 10, G = 11. Lowercase letters are
  accepted and U is read as T. Any other character becomes A.
* **Scores.** The result of query `q` against target `t` gets the index
  `id = t * NUM_Q + q`. Its score is written as one zero-extended 32-bit word at
  `S_BASE + 4 * id`.

| offset | register | meaning |
|---|---|---|
| 0x00 | CTRL | bit 0 START (write 1; ignored while busy), bit 1 DONE (sticky, cleared by START), bit 2 IDLE |
| 0x10 | Q_BASE | byte address of query record 0 |
| 0x14 | NUM_Q | number of queries (any size; processed in chunks of `BQ`) |
| 0x18 | T_BASE | byte address of target record 0 |
| 0x1C | NUM_T | number of targets |
| 0x20 | S_BASE | byte address of the score array |

DONE is set only once every score write has been answered by the memory. When
the host sees DONE, all scores are in memory.

## The worker: one column per cycle

`myers_worker` is the heart of the design and the part most worth reading. For
query `Q` (length `m`) and target `P` (length `n`) it keeps two `LMAX`-bit
vectors. `VP` marks rows where the score goes up by one from the row above, and
`VN` marks rows where it goes down by one. For each target base `P[j]`:

```
Peq = bit i set where Q[i] == P[j]
X   = Peq | VN
D0  = ((VP + (X & VP)) ^ VP) | X
HN  = VP & D0
HP  = VN | ~(VP | D0)
X   = HP << 1
VN  = X & D0
VP  = (HN << 1) | ~(X | D0)
score += HP[m-1] - HN[m-1]
```

The score starts at `m` and `VP` starts as all ones. Nothing is shifted into
bit 0, so the top row of the matrix stays zero. The result is therefore the
*semi-global* distance: the fewest edits that turn the whole query into a
substring of the target that ends at the target's last base. The testbenches
use a dynamic-programming reference with the same boundary conditions. Bits
above row `m-1` hold garbage, but carries and shifts only move towards higher
rows, so that garbage never reaches row `m-1`.

Three choices here are worth knowing:

* **Pipelining.** The loop is three stages deep with one column issued per
  cycle. Stage 0 takes the next base from a shift register. Stage 1 does the
  vector update, which includes a 360-bit add. Stage 2 updates the score. A pair
  taken in cycle 0 gives its result in cycle `n + 3`. The worker is free again
  once the result has been handed to its output FIFO, so a pair occupies it for
  `n + 4` cycles.
* **Match vector.** `Peq` is formed on the fly each cycle from the stored query
  and the current target base, by `LMAX` 2-bit compares. It is not taken from a
  precomputed table with one vector per letter. This costs comparators but no
  setup cycles.
* **Private query copy.** Each worker holds its own copy of the query. Workers
  never share memory and never wait for one another.

## Scheduling: reader, split and merge

The `reader` runs the buffering scheme:

1. It loads the next chunk of up to `BQ` queries through its HP0 fetcher. Each
   query is converted to 2-bit codes and stored with its length as one
   query-buffer entry.
2. For each target in turn, it fetches the target through its HP1 fetcher and
   then emits one pair per cycle, one for each buffered query. The query
   buffer's registered read port is used as the pipeline register of this loop,
   so a stalled downstream holds the pair without losing a cycle.
3. When all targets have met the chunk, it returns to step 1 with the next
   chunk. Each target is thus read `ceil(NUM_Q / BQ)` times.

The next target is fetched only after the last pair of the current one has
been issued, so each target costs its read latency once per chunk. That
latency is hidden as long as it is shorter than the time the workers still need
for the pairs they hold, about `n + 4` cycles. With short reads, or with a
slow memory, it shows up as idle workers.

`split` searches the `W` input FIFOs of the workers, starting one lane after the
lane it served last. It gives the pair to the first lane with room, so a full
lane is skipped rather than waited for. `merge` uses the same rotating search
over the lanes that hold a result. Because each result carries its `id`,
results may reach the writer in any order.

## Memory ports

* `axi_rd_master` turns "read N words from address A" into INCR bursts of at
  most 16 beats of 32 bits each. No burst crosses a 4 KiB boundary, and up to 16
  bursts may be in flight.
* `seq_fetch` reads the length word first and then the characters. It builds
  the `2*LMAX`-bit coded sequence and forces the bases beyond the length to 00.
* `writer` issues one single-beat write per score and keeps up to 32 writes in
  flight. With a ready port it takes one score per cycle.

The 32-bit data width, burst length 16, 16 outstanding reads and 32
outstanding writes follow the reference implementation. The address width
(32), the record format and the single-beat writes are this design's own
choices.

## Parameters and sizes

| parameter | default | meaning |
|---|---|---|
| `LMAX` | 360 | longest query or target; sets the vector width |
| `W` | 42 | number of workers |
| `BQ` | 10240 | query-buffer entries (one chunk) |

Derived widths:

* Pair stream: `4*LMAX + 2*ceil(log2(LMAX+1)) + 32` bits (1490 at the default).
* Result stream: `ceil(log2(LMAX+1)) + 32` bits (41). The reference sizes the
  result at `ceil(2*log2(LMAX)) + 32` bits (49). The extra bits serve no
  purpose for a score that cannot exceed `LMAX`, so they are left out here.
* Query buffer: `BQ * (2*LMAX + 9)` bits, about 7.5 Mbit at the default, all
  readable in one cycle.

Other instances of the same template are just other parameter values. The
tuned instances are:

| instance | `LMAX` | `W` | `BQ` | clock |
|---|---|---|---|---|
| 100 bp | 100 | 99 | 10240 | 248 MHz |
| 200 bp | 200 | 77 | 10240 | 250 MHz |
| 500 bp | 500 | 29 | 10240 | 220 MHz |
| 1000 bp | 1000 | 15 | 1024 | 122 MHz |

Whole accelerators have been simulated only at the default instance and at
small test sizes. A single worker has also been simulated at `LMAX = 1000`.

What fits in one job at the default instance:

* Any read set of reads up to 360 bases.
* Up to `2^32` comparisons, the limit of the 32-bit index.
* No more scores than fit in memory: 4 bytes per score, so a 2 GiB memory
  holds about 5.4e8 scores.

For example, 10 000 reads against themselves is 1e8 comparisons and 400 MB of
scores. At about `(n + 4) / W` = 8.7 cycles per pair of 360-base reads, that
takes roughly 4 s at 220 MHz. A set of 100 000 reads (1e10 comparisons) must be
split by the host into several jobs over slices of the targets.

## Departures from the reference design, and limits

* **Clocking, processor and memory are outside.** The processor system, DDR
  controller and clocking wizard around the accelerator are vendor blocks. Here
  the top module exposes plain AXI ports and a single clock. Host-side
  double-buffering of data sets larger than memory is software and is not
  included.
* **Worker occupancy.** Each pair takes `n + 4` cycles here. The reference
  counts `n + 2` (its "2 + Lt").
* **Target read latency.** The target read latency is whatever the memory gives
  plus a few cycles of fetch logic. The 29 cycles quoted for the reference are
  not reproduced. Nor is its starvation rule
  `29 + Lt/4 > 2 + Lt - W` reproduced exactly.
* **Write responses.** Error responses on reads and writes are ignored.
* **Reset.** Synchronous and active low (`rst_n`).
* **Choices of this design.** The register map, the memory record format, the
  index formula, the skip-if-full split policy and the round-robin merge are
  all this design's own choices.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops with a watchdog if it hangs.
Scores are always checked against a straightforward dynamic-programming edit
distance (`tb_ref_pkg`). External memory is modelled by `axi_mem_model`, which
inserts random stalls on every channel.

* `tb_myers_worker`: random and mutated pairs at `LMAX = 32`, at the default
  360 and at 1000. It checks every score and the exact `n + 3` latency.
* `tb_nt_encoder`, `tb_stream_fifo`, `tb_query_buffer`, `tb_split`,
  `tb_merge`: exhaustive or randomized checks against a cycle-level model.
* `tb_axi_rd_master`, `tb_seq_fetch`, `tb_writer`, `tb_ctrl_regs`: protocol,
  4 KiB boundaries, strobes and data.
* `tb_reader`: pair contents and order, including several query chunks.
* `tb_genetek_top` (`LMAX = 32`, `W = 3`, `BQ = 12`): whole jobs through the
  register interface. Every score is checked, and the test counts that each
  mechanism actually happened: chunk reloads, split stalls on full lanes,
  merge contention, write back-pressure and 4 KiB burst cuts.
* `tb_genetek_full`: the default instance with no parameter overrides. It runs
  a 200-query by 3-target job and a 10 250-query by 1-target job; the second
  needs two chunks. It checks all 10 850 scores and takes about 0.9 million
  cycles.

* `tb_genetek_workloads`: the default instance on scaled-down versions of the
  evaluation data sets. Read sets are compared all against all, with fixed
  lengths of 100, 200 and 360 bases and with variable lengths of 100-160,
  200-260 and 300-360 bases. Each set has 64 to 96 reads. Besides checking every
  score, it checks that each run reaches at least 80 % of the compute bound
  `sum over pairs of (Lt + 4) / W` cycles, counting query loading as
  overhead. The runs reach about 97 %. At the reference clock of 220 MHz that
  is 2.75 tera cell updates per second for 64 reads of 360 bases. The gap to
  the 3.3 peak comes from loading the queries and from the 4 extra cycles per
  pair.

With plain Verilator, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/genetek_pkg.sv tb/tb_ref_pkg.sv tb/tb_genetek_top.sv --top-module tb_genetek_top
./obj_dir/Vtb_genetek_top
```

Swap in any other testbench name to run it.
