# BOLT core: an oblivious key-value map in SystemVerilog

A key-value store that keeps its data in untrusted host memory leaks information through
*which* memory it touches, even when every byte is encrypted. An observer of the host bus
learns which record each request used, how often, and in what order. The BOLT core
removes that leak with a hardware oblivious map (OMAP). It combines a small amount of
trusted on-package memory (HBM) with a large pool of encrypted pages in host memory.

The idea fits in three sentences:

* **Bins.** Every item lives in one of two randomly chosen *bins*, its two bins.
  - A bin is either an HBM bin, which is invisible to the attacker, or a host page of
    LMAX tuples.
  - Every access reads **both** bins of the key. If a bin is a host page, the whole page
    is read and then written back.
* **Re-placement.** After each access the item is moved to two **fresh** random bins,
  choosing the less loaded of the two (power-of-two choices, "P2C").
  - The host therefore sees a pair of uniformly random page reads followed by writes of
    the same pages, whatever the key was and whether it existed.
* **Stash and lazy eviction.** An item whose new bin is a host page is not written there
  right away. It waits in an on-chip *stash* that lives in HBM.
  - It is written into its page the next time that page is read anyway.
  - A *reverse index*, one list per page, makes this eviction a direct lookup instead of
    a stash scan.

Three pieces of trusted state let the core find items without touching the host:

* a **position map**: a hash table in HBM, keyed by the user key, that records the two
  bins, where the value is, and a pointer into the value store;
* a **count list**: the load of every bin, for P2C;
* a **free ring**: the free lines of the HBM value store.

This repository gives RTL for the core, a testbench for every block, and end-to-end
testbenches at a reduced size and at the full default size. The isolation gateway,
which encrypts commands and pages, is not included. Neither are the HBM and host memory
themselves: they appear as ports (see *Departures*).

## Sizes of the default build

All sizes come from `rtl/bolt_pkg.sv`. They follow from N keys, an average bin load c,
and the HBM fraction alpha of all bins.

| quantity | formula | default |
|---|---|---|
| keys N | | 2^20 = 1,048,576 |
| logical bins K+M | N / c, c = 8 | 131,072 |
| HBM bins K | floor(alpha (K+M)), alpha = 0.2 | 26,214 |
| host pages M | (K+M) - K | 104,858 |
| page / bin capacity LMAX | bound on the maximum P2C load at c = 8 | 14 tuples |
| position map rows | N / 16 | 65,536 |
| slots per row | 16 + ceil(log2(log2 N) / log2 d), d = 4 | 19 |
| hash functions d | | 4 |
| value-store lines | HBM-load bound + stash bound | 297,946 |
| key / value width | | 32 / 64 bits |

A bin index b < K names HBM bin b. A bin index b >= K names host page b-K. Host page p,
tuple i is one 128-bit beat at byte address `host_base + (p*LMAX + i)*16`.

## Command and response words

Commands arrive already decrypted as 128-bit words:

| bits | field |
|---|---|
| [127:97] | zero padding |
| [96] | opcode: 0 = GET, 1 = PUT |
| [95:64] | key |
| [63:0] | payload: the value for a PUT; ignored for a GET |

A PUT whose payload is all ones (`TOMBSTONE`) is a DELETE. This keeps GET, PUT and DELETE
the same length and shape, so the gateway cannot tell them apart by size.

Responses are 128-bit words:

| bits | field |
|---|---|
| [127:120] | status |
| [63:0] | value, for a GET hit only; zero otherwise |

| status | meaning |
|---|---|
| 0x01 | GET hit |
| 0x02 | GET of an absent key |
| 0x03 | PUT done (insert or update) |
| 0x04 | DELETE done (also for an absent key) |
| 0x0E | no room for a new key: the map rows or the value store are full |

Every command gets exactly one response, in order.

## Position map and key search (KS)

The map has 65,536 rows of 19 slots.

* Each slot holds:
  - `{valid, key, p1, p2, sel, loc, vptr}`;
  - `sel` tells which of p1/p2 the item currently belongs to;
  - `loc` is HBM, STASH or HOST;
  - `vptr` is the value-store line while `loc` is HBM or STASH.
* A key may sit in any of the 4 rows given by 4 hash functions.
* The whole row is one HBM beat, because each slot column is modelled as its own bank.

`bolt_key_search` reads the 4 rows and compares all 76 slots with the key in parallel.
It then returns one of two results:

* **hit:** the slot's contents and its (row, slot) pointer;
* **miss:** two fresh random bins for the dummy accesses, plus the first free slot of
  the least-loaded candidate row, where a new key will go.

A slot never moves while its key exists. That is what lets the reverse index point at
slots.

## Value access (VAC)

`bolt_value_access` handles both bins of the access, p1 and p2.

* **Host-page bins.** Each bin that is a host page is read in full into one of two page
  scratchpads in `bolt_hac`. This happens for every command, hit or miss.
* **Taking the value out.** The value is then taken from where `loc` says it is:
  - from a scratchpad tuple, which is cleared;
  - from the HBM value store, where the line is read and cleared;
  - from the stash, where the line is read.
* **Executing the command.** The command is executed and the response is queued
  straight away. The response does not wait for the remap stage.

## Remap, stash and eviction (RMP)

`bolt_remap` is the longest and subtlest stage.

1. **Re-place the item.** The item's old bin loses one count. The RNG gives two distinct
   random bins p1', p2'. The count list is read for both, and the item goes to the
   lighter one (p1' on a tie).
   - An item that already had a value-store line keeps it. A new item takes a line from
     the free ring.
   - If the chosen bin is an HBM bin, `loc` becomes HBM.
   - If it is a host page, `loc` becomes STASH and the slot pointer is added to that
     page's reverse-index entry.
   - The map slot is rewritten in place.
   - A deleted item instead has its slot cleared, its line freed and its reverse-index
     pointer removed.
2. **Evict.** For each bin of this access that was a host page (now in a scratchpad),
   the stage reads the page's reverse-index entry. For each pointer in it, the stage:
   - reads the slot;
   - reads the value line;
   - writes the tuple into a free place in the scratchpad;
   - returns the line to the ring;
   - sets `loc = HOST`;
   - clears the pointer.
   If the page is full, the item simply stays in the stash. This is counted in
   `stats.n_page_full`; within the load bound it is very unlikely.
3. **Write back.** Every page that was read is written back, changed or not.

So the host sees, per command: up to two page reads at random bins, then writes of the
same pages. HBM bins cost no host traffic at all. Which bins are pages is public, but
which bins are chosen is random.

## Other blocks

| block | role |
|---|---|
| `bolt_decoder` (DEC) | Splits the command word; turns a tombstone PUT into a DELETE; zeroes the dummy GET payload. |
| `bolt_fifo` (CMD Q, RES Q) | Command and response queues. |
| `bolt_responser` (RES) | Packs status and value into the fixed-length response word. |
| `bolt_hac` (HAC) | Moves whole pages between host memory and the two scratchpads; writes dummy pages at start-up. |
| `bolt_hbm_manager` (HM) | Sole path to HBM. One arbiter for map rows (clients: remap > init > key search) and one for value lines (remap > value access). Owns the free ring. |
| `bolt_mem_arb` | Fixed-priority arbiter. A stalled request keeps its grant until accepted, so the memory sees a stable request. |
| `bolt_free_ring` | Ring of free value-store line numbers; preloaded with all lines. |
| `bolt_count_list` | Per-bin load counters, with two read ports for P2C; saturating. |
| `bolt_reverse_index` | Per-page list of up to LMAX map pointers. |
| `bolt_rng` | xorshift64 generator that gives two distinct bins per cycle. |
| `bolt_init` | Start-up: sweeps the ring, counts and reverse index; clears all map rows; writes a dummy page to every host page. |
| `bolt_top` | Wires everything together; lets one command at a time through KS → VAC → RMP. |

## Interface and timing of `bolt_top`

**Parameters:**

* `NB`: bins;
* `K`: HBM bins;
* `ROWS`: map rows;
* `VS_LINES`: value-store lines;
* `SEED`: RNG seed.

Smaller values give a small instance with the same field widths.

**Ports:**

* **Command and response streams:** `cmd_valid/cmd_ready/cmd_word` and
  `rsp_valid/rsp_ready/rsp_word`, both valid/ready.
* **Memory ports:** three memory request ports, `pm_*` (map rows), `vs_*` (value lines)
  and `host_*` (page tuples). Each has:
  - `req_valid/req_ready/req_we/req_addr/req_wdata` (and a per-slot write mask for `pm_*`);
  - `rsp_valid/rsp_rdata` for reads.
* **Memory port rules:** reads return in order, with any latency. A request must stay
  unchanged until accepted; an assertion in `bolt_mem_if` checks this.
* **Other ports:**
  - `host_base`: the base of the pinned host region;
  - `init_done`: goes high after start-up;
  - `idle`;
  - `stats`: event counters (commands, page reads and writes, HBM/stash placements,
    P2C alternates, evictions, full conditions).

**Timing:**

* **Start-up** takes about one cycle per map row, value line and host tuple. At the
  default size this is 1.68 M cycles with a one-cycle memory model.
* **Commands** are processed strictly one after another. With the reduced testbench's
  memory latencies (4 cycles to HBM, 20 to host), one GET took 103 cycles from command
  to response. Most of this is page transfers of 14 beats each.

## Departures from the published design

* **No isolation gateway.** Commands and responses are plaintext at the core boundary,
  and pages travel in plaintext on the host port. Encryption, authentication and the
  gateway belong outside the core.
* **Memories are ports.** HBM and host memory are reached through the simple in-order
  request/response port above, not through AXI4 or PCIe. Banking of the map is modelled
  by the per-slot write mask only.
* **No bulk loading.** There is no bulk loading of a data set prepared offline by the
  data owner. The core starts empty, and data enter through PUTs.
* **Fixed field widths.** Values are fixed at 64 bits and keys at 32. Types are sized
  for N = 2^20, so larger N needs the package constants raised as well as the top
  parameters.
* **Strictly sequential commands.** Key search waits until remap is done, even though
  the response leaves earlier.
* **Own choices the published design leaves open:**
  - the multiplicative hash functions;
  - the xorshift RNG, which is not cryptographic;
  - the P2C tie rule (first candidate wins);
  - the encodings of command, response, slot and tuple;
  - the status codes;
  - the all-ones tombstone;
  - saturation of the counters.

## Simulating

Requirements: Verilator 5 with `--timing`. Run from the repository root.

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/bolt_pkg.sv tb/tb_bolt_top.sv --top-module tb_bolt_top -o sim
./obj_dir/sim
```

Replace `tb_bolt_top` with any testbench name in `tb/`. Each testbench ends with a line:

```
TB_RESULT checks=<n> failures=<n>
```

Every testbench has a watchdog.

**Testbenches:**

* `tb_bolt_top`: a small instance with 32 bins, 6 of them HBM, 16 map rows and 512
  value lines, run against a reference model.
  - Load: 3000 random GET/PUT/DELETE commands over 120 keys, plus a read-back of every
    key.
  - Each mechanism is exercised many times: insertion, misses, deletes, HBM and stash
    placement, P2C alternates and over 1500 evictions.
  - Page reads equal page writes.
  - Last, one key is read 600 times in a row. The host pages read meanwhile must cover
    every page and pass a chi-square test against a uniform spread. The result was 967
    reads over 26 pages and chi-square 25.4, against a limit of 60 at 25 degrees of
    freedom.
  - Then new keys are inserted one at a time until the map answers FULL, which
    happened with 303 of the 304 slots in use. Refused keys must read back as absent,
    and accepted ones as present.
  - Result: 4177 checks pass.
* `tb_bolt_top_full`: runs `bolt_top` at its default parameters with full-size memory
  models.
  - Start-up writes 1,468,012 host beats.
  - Then 200 commands and 60 read-backs run against a reference model, and all 267
    checks pass.
  - It takes about 15 s of wall time.
* **Per-block testbenches:** `tb_bolt_<block>` checks each block against its own
  reference model. `tb_bolt_remap` uses the real count list, reverse index, ring and HAC.
  All pass.

**How sensitive the tests are:** each testbench was checked by planting one small
deliberate bug in its block. For example:

* the P2C comparison was inverted;
* the HBM line was not cleared after a read;
* the tombstone was ignored.

In every case the testbench reported failures, from 1 up to tens of thousands.

## What has not been measured

* Throughput with real HBM or PCIe latencies.
* Timing closure and area on an FPGA.
* Security beyond the single hot-key test above. Nothing here measures, for example,
  correlations between consecutive accesses or a formal leakage bound.
