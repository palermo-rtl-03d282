# Palermo ORAM controller in SystemVerilog

Oblivious RAM (ORAM) hides which memory locations a program touches. Every
cache-line miss turns into a read of one whole root-to-leaf path of an
encrypted binary tree kept in untrusted DRAM. Then the block is remapped to a
fresh random leaf. An observer on the memory bus sees only a stream of random
paths.

The price is bandwidth and latency. Classic RingORAM controllers also serve one
request at a time: each access may rewrite parts of the tree (bucket reshuffles
and path evictions), so the next access must wait until the tree is consistent.

Palermo removes most of that serialisation:

1. **Shrink the write critical section.** A bucket that would run out of dummy
   slots during this access (access count already at `S-1`) is reshuffled
   *before* the path is read, not after. Once this request's metadata updates
   and reshuffles are queued at the memory, the tree is "good to read" for the
   next request. The expensive path read (RP) of many requests can then
   overlap. A full path eviction (EP) is still serialised after RP, every `A`
   requests, which keeps the stash bounded.
2. **A 2-D array of processing elements.** Row 0 serves the Data tree. Rows 1
   and 2 serve the two recursive position-map trees (PosMap1, PosMap2). Each
   column carries one LLC miss through all three rows. The last level of the
   position map (PosMap3) sits on chip. Within a row, a one-cycle token passes
   from column to column around a ring: a PE may touch the tree only after its
   west neighbour has released it.

This repository holds RTL for the controller: the PE, the per-row stash, the
on-chip PosMap3, the tree-top cache, the PE-to-memory network, the LLC front
end and the top level. The memory controller and DRAM are outside it. A
behavioural model of them is provided for simulation.

## The tree and its memory image

| Item | Default | Notes |
|---|---|---|
| Protected space | 16 GB = 2^28 blocks of 64 B | |
| Blocks per leaf | 8 | so the Data tree has 2^25 leaves, 26 levels |
| Position-map tree levels | 23 (PosMap1), 20 (PosMap2) | each entry is 8 B, so 8 entries per block and 3 levels fewer per recursion |
| Bucket | Z = 16 real + S = 27 dummy slots + 1 metadata word | |
| Eviction period | A = 20 | |
| Stash | 256 blocks per row | |
| Tree-top cache | top 6 levels of each tree on chip | 63 buckets x 44 words per tree |
| PosMap3 | 2^22 x 32-bit entries | 16 MB |

Buckets use heap numbering (root = 0, children of n are 2n+1 and 2n+2). A
memory word address is `{6'b0, row[1:0], node[25:0], slot[5:0]}`, one 640-bit
word per slot. Slots `0..Z+S-1` hold encrypted blocks
`{real, addr[27:0], leaf[24:0], data[511:0]}`. Slot `Z+S` holds the bucket's
metadata: `{count[5:0], used[Z+S-1:0], Z x {valid, addr[27:0], slot[5:0]}}`
(609 bits at the defaults).

Every word is encrypted by XOR with a pad derived from the key and the word's
address (`palermo_pkg::xor_pad`). A word that was never written reads as the
encryption of zero, so an empty tree needs no initialisation pass. The pad
generator is a placeholder of xorshift rounds and **not a secure cipher**. A
product would put AES-CTR here, keyed per write as well as per address.

## One request, phase by phase (`palermo_pe`)

Each PE holds one request of its row at a time. It walks the request through
six phases, visible on the `phase` output:

- **CP, check position map.** The PE draws a fresh random leaf. It sends
  `{block >> 3, block[2:0], new leaf}` south, as an atomic read-old/write-new.
  The old leaf comes back. The Data row sends to the PosMap1 row, PosMap1 sends
  to PosMap2, and PosMap2 sends to PosMap3. If an *older* in-flight request of
  the same row holds the same block, the old leaf is stale: the PE reads a
  uniformly random path instead (the *pending* route).
- **LM, load metadata.** The PE waits for the token from the west, then issues
  the metadata reads of all buckets on the path back to back.
- **ER, early reshuffle.** Every bucket whose count is `S-1` is reset now:
  1. its remaining real blocks are read into the stash;
  2. the bucket is rewritten from the stash with fresh metadata;
  3. the bucket is marked as bypassed for this access.

  For the other buckets, the PE picks the real slot (if the block is there) or
  an unused dummy slot. It then writes back the metadata with `count + 1` and
  issues one slot read per bucket. **If this request does not evict, the token
  passes east here.** All of this request's tree writes are already queued, and
  the memory keeps order per address.
- **RP, read path.** The PE collects the read responses, decrypts them, and
  inserts the real block, if any, into the stash. If the pending rule applied,
  it waits until the older request has left the row. It then does one stash
  ACCESS: the block gets its new leaf, and one of three operations is applied:
  - read;
  - write with the LLC data;
  - update of one 8-byte position-map entry for the row above.

  The PE answers north.
- **EP, evict path.** This runs only when `GlobalID % A == 0`. The eviction
  leaf is the bit-reverse of a running eviction counter, which visits leaves in
  reverse-lexicographic order. The PE reads every bucket of that path, then
  writes the path back leaf to root, filling each bucket from the stash with
  blocks whose leaf shares the bucket's path prefix. Only then does the token
  pass east.
- **FI, finalize.** The PE waits until all three rows of its column are here,
  then goes idle.

Reshuffle and eviction use one engine inside the PE. It reads bucket contents
into the stash, then rewrites buckets. Real blocks go to a random rotation of
the slot positions. Dummy slots stay encrypted garbage. The metadata word
records where each real block went.

### Why concurrent requests stay correct

- **Token ring per row.** Writes to a tree by request *i* are ordered before
  any read by request *i+1*. This holds because *i+1* cannot start LM before
  *i* has queued those writes, and the memory path (mesh → tree-top cache →
  memory) never reorders accesses to one address.
- **Pending rule.** Two in-flight requests to the same block: the younger one
  reads a dummy path and touches the stash only after the older has finished.
  So it sees the block's latest value. Age is the GlobalID, compared as a
  signed difference so the 16-bit counter may wrap.
- **Stash locks.** A block named by any in-flight PE of the row is never chosen
  for a bucket rewrite. It cannot leave the stash between a path read and the
  stash update that follows it.
- **Finalize barrier.** A column is reused only after all its rows are done.

## Blocks

| File | Role |
|---|---|
| `rtl/palermo_pkg.sv` | widths, request/response structs, phase enum, address and pad functions |
| `rtl/palermo_pe.sv` | the protocol engine above |
| `rtl/palermo_stash.sv` | fully associative 256-entry block store per row. One operation per cycle, round-robin over the row's 8 PEs. INSERT, ACCESS (allocate on miss, read / write / position-map update), PICK (prefix match, skip locked, remove). Sticky overflow flag. |
| `rtl/palermo_posmap3.sv` | on-chip last position-map level, atomic read-old/write-new, 1-cycle latency |
| `rtl/palermo_ttc.sv` | tree-top cache. Words of the top levels of all three trees are served on chip in one cycle; other words go to the memory port. |
| `rtl/palermo_mesh.sv` | merges the 24 PE memory ports round-robin (tag = PE index) and steers responses back by tag |
| `rtl/palermo_frontend.sv` | LLC side. One issue slot every `ISSUE_INTERVAL` cycles, columns filled in ring order, GlobalID / eviction turn / eviction counter assigned, dummy requests when padding is on and no miss waits, dummy answers dropped. |
| `rtl/xor_cipher.sv` | encrypt/decrypt unit of a PE |
| `rtl/palermo_rng.sv` | xorshift32 source of random leaves |
| `rtl/rr_arbiter.sv` | shared round-robin arbiter |
| `rtl/palermo_top.sv` | wires the 3 x N_COLS PE grid, 3 stashes, PosMap3, mesh, tree-top cache and front end; sums the event counters |

## Top-level interface and timing

All channels are valid/ready. A transfer happens on a rising edge where both
are high. Reset is asynchronous and active low.

- **LLC side.**
  - `llc_req {we, pa[33:0], wdata[511:0], id[7:0]}` is accepted when an issue
    slot is open and the next column of the ring is idle.
  - `llc_resp {id, data}` returns in completion order, not issue order.
  - `pad_en` turns constant-rate dummy issue on.
- **Memory side.**
  - `mem_req {we, addr[39:0], wdata[639:0], tag}` carries uncached tree words.
  - `mem_resp {addr, rdata, tag}` must come back in order for any one address,
    and with the request's tag.
  - `mem_resp_ready` may drop while a PE's decoded block waits for its stash.
- **Status.**
  - `stash_overflow[2:0]` and `stash_occupancy[3]`.
  - `pe_phase[3][N_COLS]`.
  - `stats`: counts of early reshuffles, evictions, pending routes, stash hits,
    dummy requests, and tree-top cache hits.

The rate at which ORAM requests are issued is a parameter. The default of 420
cycles is 1.6 GHz divided by the 3.8 M misses per second of a 4-channel
DDR4-3200 system. That figure is a design estimate, not a measured bound.

## Simulation

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<m>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_top \
          rtl/palermo_pkg.sv tb/tb_top.sv
./obj_dir/Vtb_top
```

Use the same command for the other testbenches; only the top module name
changes.

| Testbench | What it exercises |
|---|---|
| `tb_top` | 3 x 3 PEs, 10-level Data tree, Z=16/S=27/A=20. 300 random reads and writes over a small block pool, then padded dummy traffic and re-reads, all checked against a reference memory. It fails if any of these mechanisms never occurred: early reshuffle, eviction, pending route, stash hit, dummy request, tree-top hit, RP overlap between columns, overlap between rows, more than one memory read in flight. A typical run: 308 requests, 9 reshuffles, 48 evictions, 171 pending routes, 29 memory reads in flight at peak. |
| `tb_top_full` | the top with no parameter overrides (3 x 8 PEs, 26/23/20-level trees, 420-cycle issue slot). Writes two blocks, reads them back, and reads an untouched block as zero. An eviction also runs. Builds in about 15 s and runs in well under a second. |
| `tb_workloads` | the full 3 x 8 array on 12-level trees with three access patterns: streaming lines, uniformly random lines, and a skewed hot set. Every read is checked. It reports cycles and memory words per request and the peak stash occupancy, and checks that the memory traffic per request does not depend on the pattern (typical: 118-143 words per request, stash peak 73-80). |
| `tb_pe` | one PE with its own stash, PosMap3 and memory model. Covers reads, writes and position-map updates, reshuffles, evictions and all phases. |
| `tb_stash`, `tb_posmap3`, `tb_ttc`, `tb_mesh`, `tb_frontend`, `tb_xor_cipher` | each block against a reference model with random traffic and random back-pressure |

`tb/dram_model.sv` is the memory used by the system tests. It is an in-order,
fixed-latency queue over a sparse array, and untouched words read as the
encryption of zero.

Simulation memory at the defaults is dominated by the 16 MB position-map
array. The tree-top cache adds about 0.7 MB (221 KB per row).

## Where this RTL departs from, or adds to, the published design

- **Not built:** the prefetch option (one Data block standing for several
  consecutive cache lines), the memory controller, DRAM, and the host caches.
- **The PE network** is only named in the published design. Here the
  neighbour messages (north/south requests, the west/east token) are direct
  wires between adjacent PEs. The memory traffic of all 24 PEs is merged by one
  round-robin arbiter. A wider network would add bandwidth, but it would have
  to keep per-address order.
- **The tree-top cache and PosMap3** are single arrays with one access per
  cycle, not 24 and 16 banks.
- **Token release after ER** waits until the RP reads are also issued, not
  only the reshuffle writes. This costs a few cycles and makes ordering depend
  only on per-address order at the memory.
- **Bucket permutation** is a random rotation, not a full random permutation.
  The dummy slot is the lowest unused one. A real design should use a full
  permutation and a random free slot.
- **Stash overflow** drops the block and sets a sticky flag. The stash bound
  of the protocol (at most 237 blocks were seen in the published runs) makes
  this an error condition, not a mode.
- **Lost issue slots:** when the next column of the ring is still busy, its
  slot is simply skipped.
- **Response order:** LLC responses return in completion order, tagged by `id`.
- **Metadata layout**, word width (640 bits), address format and all
  handshakes are this design's own.

## Changing sizes

All sizes are parameters of `palermo_top`: `N_COLS`, `Z`, `S`, `A`,
`DATA_LEVELS`, `STASH_N`, `TTC_LEVELS`, `PM3_AW`, `ISSUE_INTERVAL`. The
position-map rows always use `DATA_LEVELS-3` and `DATA_LEVELS-6` levels.

Limits set by the fixed field widths in `palermo_pkg`:

- `Z+S+1 <= 64` (6-bit slot field).
- The metadata must fit a 640-bit word: `6 + (Z+S) + 35*Z <= 640`. So Z = 32
  needs a wider `MEM_W`.
- `DATA_LEVELS <= 26`.
- `3*N_COLS <= 256` (memory tag).
