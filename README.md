# Selective tag comparison for STT-MRAM cache tag arrays

In an STT-MRAM cache, every read of a cell risks flipping it ("read
disturbance"). A flipped bit stays wrong until the cell is next written. The
tag array is hit hardest. A conventional set-associative lookup reads the full
tag of every way in the set, on every read and every write request. A tag is
written only when its line is replaced, so between two writes it may be read
thousands of times.

Selective tag comparison cuts most of those reads. It splits each stored tag in two:

* the **low part**: a few low-order tag bits (4 of 31 here), read from every
  way of the set and compared with the request first;
* the **high part**: the remaining bits (27 here), read and compared **only in
  the ways whose low part matched**.

Tags in one set tend to differ in their low-order bits. Usually none or only
one or two of the eight ways get past the first step, so the high parts of
most ways are never read. The data array works exactly as in a conventional
cache: all ways of the set are read in parallel and the tag result picks one.
The two tag steps together still finish no later than the data array, so the
access latency does not change.

This repository holds synthesizable SystemVerilog for the cache array of such
a design: the split tag ways, the step controller, the comparators, the data
array and the output selection. It also holds a self-checking testbench for
each block and for the whole array.

## Geometry and address fields

The default configuration is a 1 MiB, 8-way set-associative cache with 64-byte
blocks, behind a 48-bit physical address:

| field            | address bits | width | note                                   |
|------------------|--------------|-------|----------------------------------------|
| block offset     | 5..0         | 6     | not used by the array                  |
| set index        | 16..6        | 11    | 2048 sets                              |
| tag, low part    | 20..17       | 4     | tag bits 3..0, compared in step 1      |
| tag, high part   | 47..21       | 27    | tag bits 30..4, compared in step 2     |

All sizes are parameters of `rrrset_cache`: `ADDR_W` (48), `WAYS` (8), `SETS`
(2048), `BLOCK_BYTES` (64) and `LO_W` (4). The package `rrrset_pkg` holds
these defaults and the request opcode type. The tag width follows as
`ADDR_W - log2(SETS) - log2(BLOCK_BYTES)`.

Four low bits is the split point the original evaluation found best. With
fewer bits, too many ways survive to step 2. With more, step 1 itself reads
too many bits. The split is a parameter, so other points can be tried.

## How one lookup proceeds

A lookup accepted at the clock edge that ends cycle 0 takes these cycles:

| cycle | tag array (every way in parallel)                                                                 | data array                    |
|-------|---------------------------------------------------------------------------------------------------|-------------------------------|
| 0     | request on `req_*` with `req_ready` high; index and tag are registered at the edge                | –                             |
| 1     | **step 1**: low-part word line on; bits 3..0 and the valid bit of each way are sensed and captured | all 8 blocks of the set read  |
| 2     | **step 2**: 4-bit compare; only matching ways turn on the high-part word line and the 27-bit comparator; hits registered | blocks in the output register |
| 3     | response: `resp_valid`, `resp_hit`, `resp_way`, and `resp_rdata` for reads                         | hit way selected onto the bus |

The tag side takes two cycles, one for each step. The data side takes two
cycles too, so the response comes two cycles after acceptance either way. The
second tag step is hidden behind the data access.

### The step latch and the two word-line gates

Each tag row has one decoded word line. In this design it does not reach the
cells directly. It passes through two gates, one per tag part:

* **gate 1** (`wl_lo_en` of `tag_way`) connects the word line to the low part
  and the valid bit. It is driven by the way's **step latch**.
* **gate 2** (`wl_hi_en`) connects it to the high part. It is driven by the
  way's 4-bit comparator output.

`step_latch` is a set/reset element with an AND gate and an inverter on its
set input: `set = new_req & ~sense_done`.

* A new request sets it, which opens gate 1 for step 1.
* The low-part sense amplifier reports completion (`sense_done`) within that
  cycle. This resets the latch, so the low part is read exactly once per
  lookup and stays closed during step 2.
* The AND gate stops a request from setting the latch in the same cycle in
  which it is being reset.

Because of that last rule, a lookup cannot be accepted during step 1. Lookups
can therefore enter at most every other cycle.

The low part's sense amplifier (`sense_amp`) is a capture register. Its
`q_valid` output is high for exactly one cycle, which marks step 2. A way
raises `pmatch` only when all three hold:

* `q_valid` is high;
* the sensed valid bit is 1;
* the sensed 4 bits equal the request's.

`pmatch` drives gate 2 and the enable of the 27-bit comparator. A disabled
comparator reports no hit. A segment whose gate is closed drives zeros on its
bit lines. In the model, this is what "not read" means.

### Requests, writes and fills

The array serves three request kinds (`rrrset_pkg::op_e`):

* `OP_READ`: a lookup. On a hit, the block of the hitting way is returned in
  `resp_rdata`. On a miss, `resp_hit` is 0 and the data is zero.
* `OP_WRITE`: a lookup with a full 64-byte block in `req_wdata`. On a hit, the
  block is written into the hitting way at the end of step 2. On a miss,
  nothing is written.
* `OP_FILL`: installs a line. The tag, the valid bit and the block in
  `req_wdata` go into way `req_fill_way` of the addressed set, at the edge
  that accepts the request. There is no lookup and no response.

Miss handling, victim choice, write-back and write-allocate are left to a
cache controller outside this array. The fill port is how that controller
installs lines. The array itself never evicts anything.

`req_ready` is low in two cases:

* during step 1 (the step-latch rule above);
* during step 2 of a write.

The second case exists because the data array has one write port. A write
lookup uses it at the end of step 2, the same edge at which a fill accepted
in that cycle would write. With these two rules, any
sequence of requests behaves as if the requests were done one at a time in
order. The bench checks this against a sequential reference model.

Two properties are checked by assertions in `rrrset_cache`:

* at most one way hits;
* a request held while `req_ready` is low does not change.

### Counting tag reads

`lo_rd`, `hi_rd` and `pmatch_vec` are per-way outputs, valid in every cycle.
They show which tag parts are read (gate 1 and gate 2 open) and which ways
matched partially. Counting them gives the exposure of the tag cells to read
disturbance:

* each `lo_rd` bit is 5 cells read: 4 tag bits plus the valid bit;
* each `hi_rd` bit is 27 cells read;

A conventional array reads 8 × 31 cells per lookup.

## Module hierarchy

```
rrrset_cache                top: request/response, fill port, hazards, assertions
├── rrrset_tag_array        WAYS tag columns, registered hit vector
│   └── rrrset_way          one tag way with its step logic  (x WAYS)
│       ├── step_latch      set/reset step controller with AND/NOT gating
│       ├── tag_way         SETS x (4 + 27 + valid) cells, two gated word lines
│       ├── sense_amp       low-part sense amplifier (capture register, done)
│       ├── partial_tag_comp  4-bit equality
│       └── upper_tag_comp    27-bit equality with enable
├── data_array              WAYS x SETS x 512-bit blocks, 2-cycle parallel read
└── way_select              hit-driven selection of one way onto the data bus
rrrset_pkg                  default sizes, request opcode enum
```

Each file begins with a comment on what the module does, its interface and
its timing.

## Where this RTL departs from the published description, and why

* **One clock cycle per step.** The published scheme does both steps inside
  one clock cycle. It sequences them with a self-timed latch and a
  sense-amplifier completion signal, within a tag access of about 0.68 ns. A
  clocked RTL model cannot express self-timing, so here step 1 and step 2
  take one cycle each. The step latch becomes a clocked, reset-dominant flop.
  The data array is given two cycles (about 1.06 ns at the 1 GHz system clock
  of the original evaluation), so the response latency equals the data
  array's, as in the published argument.
* **Valid bit.** Each tag row holds a valid bit, read in step 1 with the low
  part. An invalid way never reaches step 2. The published description shows
  only the 31 tag bits.
* **Storage model.** STT-MRAM cells, access transistors and the two control
  transistors per row are modelled as a register array with gated outputs.
  The analog sense amplifier is modelled as a capture register. Read and
  write disturbance are not modelled.
* **Output selection.** The per-way stage that puts the hitting way's block
  on the data bus is an AND-OR multiplexer.
* **High-part sensing.** The high part is sensed and compared in the step-2
  cycle itself, without a registered sense amplifier.
* **Interface.** The request/response handshake, the fill port, whole-block
  writes and the rule that lookups enter at most every other cycle are
  choices made here. The published description leaves the cache controller
  unchanged and does not define its interface.
* **Cache-level latency.** The evaluated system quotes 10 cycles for a
  read and 20 cycles for a write of the whole L2 cache. Those figures cover
  the whole cache access, not only the arrays. This array models only its
  own two cycles. Write timing of the STT-MRAM cells is not modelled.
* **Not included.** The cache controller (replacement, miss handling,
  write-back), the processor cores and L1 caches of the evaluated system, and
  the way-prediction scheme used there as a point of comparison.

## Simulating

Each testbench is self-checking. It ends with a line
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/rrrset_pkg.sv tb/tb_rrrset_cache.sv --top-module tb_rrrset_cache -o sim
./obj_dir/sim
```

Replace `tb_rrrset_cache` with any other bench in `tb/`:

| bench                  | what it checks                                                                                |
|------------------------|-----------------------------------------------------------------------------------------------|
| `tb_step_latch`        | set, reset and set-blocked-by-reset behaviour against a reference                             |
| `tb_sense_amp`         | done in the sensing cycle, capture, one-cycle `q_valid`, hold                                  |
| `tb_partial_tag_comp`  | all 256 input pairs                                                                           |
| `tb_upper_tag_comp`    | random, equal and single-bit-different tags, enable on and off                                |
| `tb_tag_way`           | reset of valid bits, full fill, random reads under all gate combinations, rewrites            |
| `tb_rrrset_way`        | cycle-exact step 1 / step 2 behaviour of one way against a shadow copy                        |
| `tb_rrrset_tag_array`  | per-cycle read strobes, partial matches and registered hits of all 8 ways                      |
| `tb_data_array`        | 2-cycle read latency of all ways, write then read of the same block                           |
| `tb_way_select`        | every one-hot hit and the miss case                                                           |
| `tb_rrrset_cache`      | the whole array at default size, against a controller-side reference model (below)            |
| `tb_rrrset_configs`    | seven other geometries (1–8 MiB, 8 and 16 ways) and split points 1–10, via `cache_env` (below) |

`tb_rrrset_cache` plays the cache controller. It sends a stream of 6000 reads
and writes, concentrated on 8 sets and a window of 24 neighbouring tags, with
one request in eight going to an unrelated tag. After each miss it fills the
line, choosing the victim round-robin. It checks that:

* every response comes exactly two cycles after acceptance;
* the hit, way and data of every response are right;
* the step-2 partial-match vector is right;
* only partially matching ways read their high part;
* every lookup reads each way's low part exactly once.

It requires each of these to happen at least once: read hit, read miss, write
hit, write miss, fill, a lookup with no way in step 2, a partial match that is
not a hit, a stall behind step 1, a stall behind a write, and back-to-back
lookups.

With this access pattern, a typical run reads about 22 % of the tag cells a
full-tag compare would read. That figure counts the valid bit. Hits average
about 1.2 partially matching ways, and misses about 0.3. These numbers
describe the synthetic pattern only. They are not a prediction for real
workloads.

## Other geometries and split points

`tb_rrrset_configs` runs `cache_env` instances side by side. Each instance is
a complete checking environment around one `rrrset_cache`. Together they
cover:

* every geometry from 1 to 8 MiB with 8 or 16 ways (64-byte blocks, 48-bit
  addresses, so tags of 28 to 32 bits);
* the default geometry with the low part set to each width from 1 to 10
  bits, all fed the same access stream.

One run gave the following share of tag cells read, against a full-tag
compare:

| low bits | 1    | 2    | 3    | 4    | 5    | 6    | 7    | 8    | 9    | 10   |
|----------|------|------|------|------|------|------|------|------|------|------|
| read     | 53.6 | 32.7 | 24.2 | 21.9 | 22.6 | 25.3 | 28.3 | 31.4 | 34.4 | 37.6 |

The curve has its minimum at 4 bits. With fewer bits, more ways survive to
step 2. With more bits, step 1 reads more cells in every way. The geometries
all land between 20 % and 24 % for the same kind of stream. Like the figures
above, these numbers describe a synthetic stream, not measured programs.

## Changing the design

* **Other cache sizes and associativities:** set `WAYS` and `SETS` on
  `rrrset_cache`. For example, `WAYS=16, SETS=1024` gives 1 MiB 16-way with
  a 32-bit tag, and `WAYS=8, SETS=4096` gives 2 MiB 8-way with a 30-bit tag.
* **Other address widths:** set `ADDR_W`. The tag widens or narrows, and the
  low part stays `LO_W` bits.
* **Other split points:** set `LO_W`. Everything below the top derives its
  widths from it.
* The testbenches other than `tb_rrrset_cache` set their block's parameters
  explicitly. Change them there when trying other sizes.
