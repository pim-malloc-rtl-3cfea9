# A buddy cache for dynamic memory allocation on PIM cores

Each core of a bank-level processing-in-memory (PIM) system, such as an
UPMEM DPU, can reach only its own DRAM bank. Each core therefore needs its own
heap and its own allocator, and that allocator runs on a slow in-order core. A
good software design for this setting has two levels:

* a private **thread cache** per hardware thread. It serves requests of 16 B to
  2 KB from fixed-size sub-blocks of 4 KB blocks and needs no lock;
* a shared **buddy allocator** behind it. It serves 4 KB blocks to the thread
  caches, and serves larger requests directly. Its tree covers a 32 MB heap
  down to 4 KB blocks in 13 levels. Each tree node has a 2-bit state (free,
  partially allocated, fully allocated), so the whole tree is 4 KB of metadata
  kept in the DRAM bank.

Most requests end in the thread cache, yet most of the allocation time goes
into the buddy allocator's tree walks. Each step of a walk reads a node state
that lives in DRAM. A software buffer in the scratchpad helps little: it is
refilled in large blocks, and the nodes a walk visits are scattered.

The RTL here is the hardware answer to that: a **buddy cache**. It is a tiny,
fully associative cache of metadata words, one per core, with exact LRU
replacement. Software drives it through four new instructions. Its default
size is 16 entries of 4 B of metadata each (64 B). That holds 256 tree nodes,
enough to keep the upper levels of the tree and the current search path on
chip. In the allocator model used to test it, a stream of 4 KB allocations
finds 99.8 % of its metadata reads in the cache.

## Where it sits

The cache sits beside the core's pipeline, next to the instruction memory,
the scratchpad (WRAM) and the atomic unit. It has no port to DRAM. Software
moves metadata between DRAM and the cache, through the scratchpad, as the
ordinary DMA path already allows. The cache only answers the four instructions
below. So the only hardware change to the core is this block plus the decoding
of the four opcodes in the pipeline. That decoder, the pipeline, the memories
and the DMA engine are the existing core's and are not part of this RTL.
`buddy_cache` takes an already decoded instruction.

```
 pipeline ──req_valid, req{op, idx, addr, data}──▶ buddy_cache ──rsp_valid, rsp_result──▶ register file
                                                   ├─ bc_cam : valid | tag (DRAM address) | value, ×ENTRIES
                                                   └─ bc_lru : recency order, names the victim
```

## An entry and what it caches

| field | width | meaning |
|---|---|---|
| valid | 1 | entry holds a word |
| tag | 32 | DRAM (MRAM) byte address of a 4-byte metadata word |
| value | 32 | that metadata word |

The cache does not interpret the value. In the allocator model that exercises
it, a word packs the 2-bit states of 16 consecutive tree nodes in heap order.
Node `n` (root = 1, children `2n` and `2n+1`) is found at bits `2*(n%16)+1 :
2*(n%16)` of the word at `META_BASE + 4*(n/16)`. So the 16 nodes of one word
are siblings and cousins on the same level (or the top four levels together).
The state codes are 0 = free, 1 = partially allocated and 2 = fully allocated.
This packing, the 0x0800_0000 base of the metadata area and the state codes
belong to the software model, not to the hardware. Any other layout works
unchanged, as long as a tag names one 32-bit word.

## The four instructions

| instruction | operands | result (one cycle later) | side effect |
|---|---|---|---|
| `init_bc` | none | 0 | all entries invalid; LRU order reset |
| `lookup_bc` | `addr` | hit: index of the entry (0 … ENTRIES-1); miss: `~victim`, negative | a hit makes the entry most recently used |
| `read_bc` | `idx` | value of entry `idx` (0 if invalid or out of range) | none |
| `write_bc` | `idx`, `addr`, `data` | 0 | entry `idx` := {valid, `addr`, `data`}; most recently used |

The sign of the `lookup_bc` result tells a hit from a miss. On a miss, the
other bits already name the entry that software must refill, namely the least
recently used one. No extra instruction is needed to find it. Metadata access
in the allocator then reads:

```c
uint32_t get_metadata_word(uint32_t addr) {
    int r = lookup_bc(addr);
    if (r >= 0)                       // hit: one more instruction
        return read_bc(r);
    uint32_t v = dma_read_word(addr); // miss: word fetched into the scratchpad
    write_bc(~r, addr, v);            // replaces the LRU entry
    return read_bc(~r);               // (or simply v)
}

void set_metadata_word(uint32_t addr, uint32_t v) {
    dma_write_word(addr, v);          // write-through to DRAM
    int r = lookup_bc(addr);
    if (r >= 0) write_bc(r, addr, v); // keep the cached copy current
}
```

Four points in this protocol matter:

* **Write-through, no write-back.** The cache has no dirty bit. Software
  writes every metadata update to DRAM and also into the entry if the word is
  cached. So an evicted entry is just overwritten, and a refill never needs
  to save anything first.
* **Unique tags.** Software refills only after a miss, so no address is ever
  held twice. `bc_cam` asserts this: at most one entry may match.
* **What counts as a use.** A `lookup_bc` hit and every `write_bc` make the
  entry most recently used. `read_bc` does not change the order, so reading an
  entry back, for example to inspect it, does not disturb replacement.
* **Fill order.** After reset or `init_bc` the victim order is entry 0, 1, 2, …,
  so empty entries are filled before any valid entry is evicted. No separate
  "prefer an invalid entry" logic is needed, because entries are only ever
  invalidated all at once.

## Timing

One instruction can be issued per cycle, with no stalls and no ready signal.
The result is registered and appears with `rsp_valid` on the cycle after the
instruction. This is one core cycle of access latency, the figure the
evaluation assumes. The state changes at the same clock edge, so an
instruction sees the effect of the one issued just before it. For example, a
`read_bc` right after a `write_bc` returns the new value. The lookup is a
parallel tag compare of all entries plus a priority encoder. Two assertions in
`buddy_cache` check the one-cycle rule: an instruction is always followed by a
result in the next cycle, and a result never appears without one. Reset is
asynchronous, active low, and does what `init_bc` does.

## LRU replacement

`bc_lru` keeps an exact LRU order with one `log2(ENTRIES)`-bit age per entry.
The ages always form a permutation of 0 … ENTRIES-1. Age 0 is the most
recently used entry, and the entry of age ENTRIES-1 is the victim. Using entry
`j` sets its age to 0 and increments every age that was smaller than `j`'s.
For 16 entries that is 64 flip-flops and 16 comparators. An assertion checks
that exactly one entry is oldest.

## Files

| file | what |
|---|---|
| `rtl/bc_pkg.sv` | widths, default entry count, `bc_op_e` operation codes, `bc_req_t` instruction struct |
| `rtl/bc_cam.sv` | entry storage: valid bits, tags, values; parallel match, indexed read and fill |
| `rtl/bc_lru.sv` | age-counter LRU, victim output |
| `rtl/buddy_cache.sv` | **top**: instruction semantics, LRU updates, registered result |
| `tb/tb_bc_cam.sv`, `tb/tb_bc_lru.sv` | unit tests against array / list reference models |
| `tb/tb_buddy_cache.sv` | instruction-level test: directed cases plus 20,000 random instructions against a reference model; checks the one-cycle latency |
| `tb/tb_buddy_cache_e2e.sv` | end to end at default size: a buddy allocator whose every metadata access goes through the cache |
| `tb/bc_alloc_harness.sv` | test helper: a buddy cache of any size plus a model of the whole allocator (thread caches and buddy tree), running one of four workloads |
| `tb/tb_bc_size_sweep.sv` | hit rate for 4 … 64 entries |
| `tb/tb_pim_malloc_workloads.sv` | microbenchmark, graph-update and LLM KV-cache allocation patterns |

The main parameter is `ENTRIES` on `buddy_cache`, `bc_cam` and `bc_lru`
(default 16). The tag and value widths are fixed at 32 bits in `bc_pkg`.
`ENTRIES` should be at least 2. The age and index widths assume a power of
two; other sizes work, but waste index codes.

## Verification and what it shows

Every testbench compares the RTL with an independent model. Every run prints
one `TB_RESULT checks=… failures=…` line. Every run has a watchdog.

The allocator model in `tb_buddy_cache_e2e` and `bc_alloc_harness` plays the
software side. It searches the tree depth first for a free node of the
requested size. A free subtree is entered at its leftmost block. After each
change, the model updates node states upward: a parent is full if both
children are full, free if both are free, and partial otherwise. A free of an
address climbs from the address's leaf to the first node that is not free.
The model checks:

* every value the cache returns against the DRAM model;
* every victim the cache names against a reference LRU list;
* every result for its one-cycle latency;
* every block for size, alignment and overlap.

It also checks that the tree is entirely free again once everything has been
released. The end-to-end test also fills the heap until allocations fail, and
checks that each failure is genuine. It counts hits, misses, fills of empty
entries, LRU evictions, `init_bc` and allocation failures, and requires each of
them to occur.

Results, with the numbers the original evaluation reports for comparison:

| experiment | this RTL + model | reported |
|---|---|---|
| 16 threads × 128 × 4 KB, hit rate (16 entries) | 99.78 % | 99 % |
| metadata fetched from DRAM per request, same run | 0.5 B | about 2 B |
| hit rate for 16 / 32 / 64 / 128 / 256 B of cache | 72 / 89 / 99.8 / 99.8 / 99.8 % | about 68 / 76 / 99 / 99 / 99 % |
| requests served by the thread cache, graph and LLM patterns | 91 % mean | 93 % mean |

The hit rates match in shape: they saturate at 64 B. They are not an exact
match, because they depend on the search order of the allocator software. The
model's order is only one reasonable choice.

The graph-update and LLM patterns in `tb_pim_malloc_workloads` are scaled
stand-ins that reuse the reported allocation sizes: 256 B list elements,
arrays doubling from 64 B to 32 KB, and 512 B KV-cache blocks. They are not
the real datasets.

## Running the tests

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Irtl -Itb rtl/bc_pkg.sv rtl/bc_cam.sv rtl/bc_lru.sv \
    rtl/buddy_cache.sv tb/tb_buddy_cache_e2e.sv --top-module tb_buddy_cache_e2e -Mdir obj_e2e
./obj_e2e/Vtb_buddy_cache_e2e
```

For the sweep and workload tests, add `tb/bc_alloc_harness.sv` and change the
testbench and top-module names. Each test runs in a few seconds at most.

## Departures and open points

Taken from the original description:

* one cache per core, fully associative with a parallel tag match;
* entries of a valid bit, a 4-byte DRAM-address tag and a 4-byte value;
* 16 entries;
* LRU replacement;
* the four instructions and their meaning;
* one cycle of access latency;
* the miss sequence: look up, fetch the word from DRAM into the scratchpad,
  evict the LRU entry, write the word into that entry.

Choices of this RTL, where the description is silent:

* the instruction operands. `write_bc` carries the tag as well as the index
  and value;
* the sign convention of the `lookup_bc` result. The description calls a hit
  "positive" and a miss "negative"; here a hit in entry 0 returns 0;
* returning the victim index in the miss result;
* which instructions count as a use for LRU;
* write-through instead of write-back;
* the initial victim order;
* zero for reads of invalid or out-of-range entries;
* the age-counter form of LRU.

The core around the cache is not included: the instruction decoder, pipeline,
register file, IRAM, WRAM, DMA engine, atomic unit and DRAM bank. Neither is
the allocator software. The testbenches model the allocator only as far as the
cache's behaviour depends on it. The entries are plain flip-flops with
comparators, not a custom CAM macro; the area and power figures reported for
the original cache came from a memory model, not from this RTL.
