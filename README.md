# Synonym-safe, coherent VIVT caches with a reverse lookup table

A virtually indexed, virtually tagged (VIVT) level-1 cache is looked up with
the virtual address alone. The MMU is consulted only on a miss, so hits are
fast and cheap. Two problems come with this:

* **Synonyms.** Two virtual addresses can map to the same physical address.
  When the cache is larger than a page, the two aliases can sit in different
  cache lines. A store through one alias then leaves a stale copy under the
  other.
* **Coherence.** Other cores announce writes by *physical* address. A VIVT
  cache cannot find a line by physical address.

This RTL implements the reverse-lookup-table (RLUT) scheme of Desai and
Deshmukh, "An efficient reverse-lookup table based strategy for solving the
synonym and cache coherence problem in virtually indexed, virtually tagged
caches". It is sized for the direct-mapped 32 KB caches of the AJIT SPARC-V8
core. The scheme keeps one invariant:

> for every physical line in the cache, at most S virtual copies are cached.

This design uses **S = 1**. A small table, the RLUT, maps each cached physical
line to the one cache line that holds it. The RLUT is consulted in two cases:

* **On every miss, after translation.** If the missing physical line is
  already cached under another virtual address, that older copy is
  invalidated before the new one is installed.
* **On every coherence invalidate from outside.** The RLUT turns the physical
  address into the cache line to drop.

Neither case is on the hit path. The miss-time lookup runs while the line is
being fetched from memory, so it adds no latency.

## Why three bits per entry are enough

With 4 KB pages, a virtual address V and its physical address P share bits
[11:0]. The cache fields are:

| field | bits | notes |
|---|---|---|
| line offset | VA[5:0] | 64-byte lines |
| cache index | VA[14:6] | 512 lines = 32 KB, direct mapped |
| cache tag | VA[31:15] | 17 bits |
| index bits shared with P | VA[11:6] = PA[11:6] | fixed by the page offset |
| index bits that differ | VA[14:12] | the "colour" of the alias: 8 possibilities |

Knowing P, the cache line of its alias is `{V[14:12], P[11:6]}`. The RLUT
therefore only stores the 3 colour bits per physical line. It is organised as
a set-associative memory:

* **set index:** PA[11:6], giving 64 sets.
* **tag:** PA[35:12], 24 bits (36-bit physical addresses).
* **data:** VA[14:12], 3 bits.
* **ways:** 8. For a given PA[11:6], only the 8 cache lines `{c, PA[11:6]}`
  with c = 0..7 can hold data. So at most 8 physical lines share an RLUT set.

Size: 64 × 8 × (24 + 3) = 13 824 bits = 1728 bytes per RLUT. There are two
RLUTs (I and D); block diagrams of the core round this to 2 KB each. The published sizing rule is `(CacheSize/64) × (24 + 3S) / 8`
bytes for caches larger than a page. It always counts 3 colour bits per alias:

| cache size | S | RLUT bytes (rule) | this RTL at that size |
|---|---|---|---|
| ≤ 4 KB | – | 0 (no synonyms possible) | not supported; no RLUT needed |
| 8 KB | 1 | 432 | 64 sets × 2 ways × 25 bits = 400 |
| 16 KB | 1 | 864 | 64 sets × 4 ways × 26 bits = 832 |
| 32 KB | 1 | 1728 | 64 sets × 8 ways × 27 bits = 1728 (default) |

At smaller sizes the RTL stores only the colour bits that exist, which is why
it comes in slightly under the rule.

The valid bits are kept in 512 flip-flops per RLUT. RLUT storage including
valid bits is 5.3 % of the cache arrays: (13 824 + 512) / (262 144 data +
8 704 tag + 512 valid bits).

## Structure

```
 CPU fetch  --> ICACHE 32 KB <--inv-- IRLUT 64x8 <--+
                   |   ^syn             ^           |
                   v   |                | (P,V)     |   invalidates (PA)
                  MMU sequencer --------+---------- | <-- invalidation queue <--
                   ^   |                | (P,V)     |
                   |   vsyn             v           |
 CPU ld/st  --> DCACHE 32 KB <--inv-- DRLUT 64x8 <--+
                   MMU <--> translation port, memory port
```

| file | content |
|---|---|
| `rtl/vivt_pkg.sv` | sizes, address fields, message structs |
| `rtl/sp_sram.sv` | single-port synchronous SRAM with lane write mask |
| `rtl/sync_fifo.sv` | valid/ready FIFO: invalidation queue and MMU request queues |
| `rtl/rlut.sv` | reverse lookup table |
| `rtl/vivt_dm_cache.sv` | direct-mapped VIVT cache and its controller |
| `rtl/mmu_seq.sv` | MMU sequencer for misses and write-throughs |
| `rtl/ajit_mem_subsystem.sv` | top: both caches, both RLUTs, MMU sequencer, invalidation queue |

The following parts are not in the RTL. They are ports of the top, and the
testbenches model them:

* the CPU;
* the translation unit (TLB and table walk);
* physical memory;
* the multi-core coherent memory controller that issues invalidates.

## A miss, step by step

The latencies below are those of the testbench models: 3-cycle translation and
8-cycle memory. Cycle 0 is when the CPU request is accepted.

1. **Cycles 0–1: cache access.** The tag and data SRAMs are read in cycle 0.
   The hit/miss decision is made in cycle 1. On a miss, the line's valid bit
   is cleared and a miss request enters the MMU request queue.
2. **Translation.** The MMU sequencer takes the request and asks the
   translation unit for P.
3. **Lookup+insert and fetch start together.** The sequencer presents (P, V)
   to that cache's RLUT. In the same cycle it starts the memory read. A write
   miss first posts its word write, so the fetched line already contains the
   stored word (write-through with allocate).
4. **RLUT answers (2 cycles, not pipelined).** It reads the set, compares the
   tags, writes the updated set back and sends the *synonym message* to the
   cache. If P was present under colour c, the message is `inval=1,
   index={c, P[11:6]}` and the cache clears that line at once. Otherwise it is
   `inval=0`.
5. **Line delivered.** The sequencer hands the line to the cache only after it
   has seen the synonym message. The cache writes the tag and data, sets the
   valid bit and returns the word to the CPU.

Because of step 5, the old alias is always gone before the new one appears.
The invariant therefore holds at every clock edge. The reverse lookup (2
cycles) hides completely behind the memory fetch (8 or more cycles).

On a translation error, the miss gets an error line response. No RLUT or
memory access is made, the CPU sees `error=1`, and the line stays invalid.

## Coherence invalidates

The memory system sends physical line addresses on the `snoop_*` port. Each
address is queued, then offered to both RLUTs. It leaves the queue once both
have taken it. A **lookup** is fully pipelined: one is accepted per clock,
and the result appears the cycle after acceptance. On a match, the RLUT
offers "invalidate line `{c, P[11:6]}`" to its cache. A physical line that is
not cached produces no message at all.

The cache samples invalidates only while it has **no miss pending**. This way
an invalidate can never overtake a line that is being fetched. A result the
cache cannot take yet waits in a one-entry hold register inside the RLUT, and
further lookups stall. Inserts are not blocked, so a pending miss can always
complete. The invalidation queue absorbs bursts, and when it is full,
`snoop_ready` drops.

Lookups do not remove the entry. A leftover entry can only name a line that
is already invalid or will be refilled, so the worst case is a harmless
extra invalidate.

## Inside the RLUT

* **Storage.** One single-port SRAM word per set holds 8 × {tag, colour}. The
  valid bits are flip-flops, so reset empties the table.
* **Lookup+insert, cycle 1.** The set is read.
* **Lookup+insert, cycle 2.** The "multiplexor" compares the 8 tags and
  selects the matching way's colour. The control logic builds the new set,
  writes it back and sends the synonym message.
* **Choosing a way.** The new (P, colour) entry goes into:
  1. the way that already holds P (the alias is being replaced), else
  2. the way whose colour equals the new colour: that entry names the very
     cache line the fill is about to overwrite, so it is stale; else
  3. the first free way.

  If P was present, any other entry with the new colour is also dropped.
  Valid entries of a set therefore always have distinct colours, and 8 ways
  can never overflow. An assertion checks this.
* **Arbitration.** There is one SRAM port. Inserts, which are rare, have
  priority over snoop lookups, which are common. The write-back cycle of an
  insert blocks both.

## Inside the cache

The cache controller follows this loop: get request → decode → (invalidate |
check hit/miss → return data | send to MMU → synonym invalidate → update
line).

| state | what happens |
|---|---|
| `S_READY` | A pending invalidate is applied in one cycle and wins over a CPU request. Otherwise a request is accepted and the SRAMs are read. |
| `S_CHECK` | Hit: the response is given, and the next request (or an invalidate) is accepted in the same cycle. This sustains one request per clock at 1-cycle latency. Miss: the line is invalidated and the miss goes to the MMU. |
| `S_WAIT_SYN` | Waits for the RLUT's synonym message and applies it. |
| `S_WAIT_LINE` | Waits for the line, then fills the line and responds. |

**Stores.** A store writes its bytes into the data SRAM during the same access
that reads the tag. The tag and data arrays are thus updated together, and
one single-port SRAM access serves both loads and stores. If the store turns
out to be a miss, the line is invalidated and refilled anyway, so the early
write does no harm. A store hit also sends a write-through to the MMU queue.
It stalls only if that 4-entry queue is full.

## Interfaces of `ajit_mem_subsystem`

All channels are valid/ready unless marked "valid only". Transfers happen on
the rising clock edge where both are high. `rst_n` is an asynchronous,
active-low reset.

| port group | direction | payload |
|---|---|---|
| `ireq_*`, `dreq_*` | in | `cpu_req_t`: write, 32-bit VA, 32-bit data, 4 byte enables |
| `iresp_*`, `dresp_*` | out, valid only | `cpu_resp_t`: data, error. In order, one per request, stores included |
| `snoop_*` | in | 36-bit physical address to invalidate |
| `xreq_*` | out | `xlate_req_t`: VA and write flag. At most one outstanding |
| `xresp_*` | in, valid only | `xlate_resp_t`: 36-bit PA and error |
| `mem_req_*` | out | `mem_req_t`: posted word write with byte enables, or line read |
| `mem_resp_*` | in, valid only | `line_resp_t`: 512-bit line, in order, one per read |

The CPU must accept responses as they come. The I-port never writes.
Stores through the D-cache do not update the I-cache; as on SPARC, code that
modifies itself has to flush.

## Departures from the paper and choices made here

The paper fixes the following, and this RTL follows them:

* the address split and RLUT sizes;
* S = 1;
* direct-mapped, write-through-allocate caches with 1-cycle hits;
* the order of translate → reverse lookup ‖ fetch → invalidate → update;
* a 2-cycle non-pipelined lookup+insert;
* a 1-per-clock pipelined snoop lookup;
* invalidates sampled only when no miss is pending.

The following are choices made here:

* the valid/ready handshakes and message formats;
* queue depths of 4;
* round-robin service of the I and D caches;
* invalidates winning over CPU requests;
* the early store write;
* the RLUT way-selection policy and hold register;
* valid bits in flip-flops;
* the error reporting.

Not built:

* **S > 1.** This would need several colours per entry and, on a write miss,
  invalidation of all other aliases.
* **Set-associative VIVT caches.** These would need the full VA[31:12] as RLUT
  data.
* **Context tags for homonyms.** The scheme assumes homonyms are impossible,
  either because caches are flushed on context switch or because contexts are
  tagged.
* **A per-core queue for memory responses.** A multi-core system gives each
  core one of these next to its invalidation queue. It is left out here
  because the MMU sequencer accepts a line response in any cycle, so such a
  queue would never hold an entry. The invalidation queue is built.

## Verification

Each testbench is self-checking and ends with a `TB_RESULT checks=… failures=…`
line.

| testbench | what it establishes |
|---|---|
| `tb_sp_sram` | Masked writes, read-first behaviour and output hold, checked against a reference array. |
| `tb_sync_fifo` | Ordering, the full and empty flags, and pushing while full but popping. |
| `tb_rlut` | Every synonym message and snoop invalidate is compared with a behavioural model (per set: tag → colour, unique tags and colours). Insert latency is checked at 2 cycles with the port blocked; snoop results come 1 cycle after acceptance, back-to-back, and in order under back-pressure. |
| `tb_vivt_dm_cache` | Hit/miss is predicted from a model of valid bits and tags. Read hits take 1 cycle, and back-to-back hits are exercised. The MMU requests are checked. Synonym and snoop invalidates remove exactly the named line. Errors leave the line invalid. No invalidate is taken during a miss. |
| `tb_mmu_seq` | Both ports are served, each in order. The RLUT gets (P, V) only for misses. A write precedes its line read. A line is never returned before the RLUT answered. Faults are handled, and the RLUT operation and the fetch overlap. |
| `tb_ajit_mem_subsystem` | Full-size, end to end; described below. |

**The end-to-end test.** It runs at full size with a page table that maps 16
virtual data pages onto 4 physical pages, so there are constant synonyms of
different colours and same-colour aliases with different tags. About 10 000
loads and stores and 8 000 fetches run, mixed with:

* other-core writes, each followed by its invalidate;
* random invalidates that carry no data;
* translation faults;
* memory back-pressure.

Every load and fetch is checked against program-order memory. The test
counts 20 mechanisms and fails if any never occurred:

* hits, misses and back-to-back hits;
* synonym invalidates;
* snoop invalidates, including lookups with no match;
* the RLUT hold register;
* stale-entry replacement;
* a full write-through queue and a full invalidation queue;
* invalidate-over-request priority;
* both MMU ports pending at once.

It takes about 250 000 cycles, under a second with Verilator.

To run one, for example the RLUT test:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/vivt_pkg.sv tb/tb_rlut.sv --top-module tb_rlut
./obj_dir/Vtb_rlut +verilator+rand+reset+2
```

## Changing the configuration

All sizes derive from five constants in `vivt_pkg`: `VA_W`, `PA_W`,
`CACHE_BYTES`, `LINE_BYTES` and `PAGE_BYTES`. Everything else follows from
them:

* the cache index and tag widths;
* the number of RLUT sets, PAGE_BYTES / LINE_BYTES;
* the colour width, log2(CACHE_BYTES / PAGE_BYTES);
* the RLUT ways, 2^colour bits.

For example, `CACHE_BYTES = 16384` gives a 64-set, 4-way RLUT with 2-bit
colours. The cache must be larger than a page, so that there is at least one
colour bit.

The
RLUT, cache, MMU-sequencer and end-to-end testbenches pass with
`CACHE_BYTES` set to 8 KB, 16 KB and 32 KB. Line and page sizes other than 64
bytes and 4 KB have not been simulated.
