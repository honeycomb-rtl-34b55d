# An ordered key-value store accelerator for B-Tree gets and scans

This RTL runs the read side of a B-Tree key-value store on a SmartNIC. Host
software keeps the tree in host memory and performs every write. The accelerator
answers `get(K)` and `scan(Kl, Ku)` itself. It reads tree nodes over PCIe, or
from a DRAM cache on the card, and the host CPU is never involved.

Each read runs at a snapshot: a global read version that the host publishes.
Because of this, reads never take locks and never block writers.

## Node format

Every node is 8 KB and is named by a logical identifier (LID). A page table maps
the LID to the node's physical address. A node has four parts:

| Bytes | Part | Contents |
|---|---|---|
| 0–47 | header | type, level, bytes used, version, old-version pointer, leftmost child or left sibling, right sibling, end of the sorted block, shortcut bytes |
| 48–511 | shortcut block | every few sorted keys, paired with the offset of the segment that starts there |
| 512 up to `sorted_end` | sorted block | the items in key order |
| after `sorted_end` | log block (leaves only) | recent writes, in arrival order |

A log entry consists of:

- a 2-byte back pointer to the sorted item it comes before or replaces;
- a 1-byte order hint, which is its rank among earlier log entries (bit 7 marks a replace);
- a 5-byte version delta;
- the key and the value.

A value length of `0xFFFF` marks a delete.

All numbers are little-endian. The exact byte layout is defined in
`rtl/hc_pkg.sv`. The layout is this design's own choice: only the sizes of the
blocks and of the log-entry fields come from the published design.

When a node holds a version newer than the reader's snapshot, the reader follows
the old-version pointer instead. It keeps doing so until it finds a version the
snapshot can see.

## Data path

| Stage | Module(s) | What it does |
|---|---|---|
| Request management | `request_preprocess`, `key_buffers`, `epoch_manager` | Stores the keys in LB/UB buffers and gives the request a sequence number. Attaches the current read version and emits a visit of the root. |
| Interior walk | `interior_engine` (14 × `ksu`, `msi_adapter`) | Each visit reads a node's first 512 bytes, then a single sorted segment. A KSU compares keys 16 bytes per cycle (`key_compare`) and picks the largest key ≤ Kl. Unfinished visits loop back through a feedback FIFO. |
| Leaf scan | `leaf_engine` (5 × `leaf_scan_unit`) | Each slot scans one leaf chain; see below. |
| Memory | `mem_subsystem` | Resolves each LID and decides whether the read is served from on-chip SRAM (root cache), the card's DRAM cache or PCIe. Contains `page_table`, `metadata_table`, `node_address_table`, `load_balancer` and `root_cache`. |

The leaf scan unit works through its chain as follows:

- finds the shortcut for Kl;
- fetches the log and puts it in key order with the order hints (`log_sorter`), dropping entries too new for the snapshot;
- merges the log with each sorted segment it fetches;
- emits every item with Kl < key ≤ Ku, preceded by the start item K_s (the largest key ≤ Kl);
- follows right-sibling pointers until it passes Ku.

A get is run as a scan from K to K that returns only an exact match.

Memory reads return 16-byte beats covering the 16-byte-aligned range of the
request. Beats of different reads may interleave on one port. Each beat carries
its tag, and the engines route beats by adapter and tag.

### Consistency across host updates

The node address table records, for each request, the physical address of the
first block it read from each node. Later segment reads of that node use this
address, so a page-table update in the middle of a visit cannot mix two versions
of a node.

A write to the page table invalidates the node's cache entry. If the node is the
root, it also clears the root cache.

Only interior nodes are cached in DRAM. A miss on a node's first 512 bytes
allocates a cache frame (4-way, random victim). PCIe data is written back to
DRAM in whole 256-byte chunks, and a 32-bit occupancy map records which chunks
are present. When the DRAM has more outstanding work than PCIe, relative to
their bandwidths (34 and 13 GB/s), the load balancer sends a cache hit over
PCIe instead.

## Interfaces of `honeycomb_top`

**Requests.** Requests arrive as 16-byte beats.

- Header beat:
  - `[1:0]` op (0 get, 1 scan)
  - `[17:2]` tag
  - `[26:18]` LB key length
  - `[35:27]` UB key length
- Then the LB key fragments, and for a scan the UB fragments.

**Responses.** Responses are `result_t` descriptors: tag, leaf LID, byte offset
and a flag saying whether the item came from the log. Each request ends with a
`last` marker, with `empty` set if nothing matched.

**Host control.** The host uses plain write strobes for:

- the read version;
- the root LID and tree height;
- page-table entries.

**Memory ports.** DRAM has read and write ports. PCIe has a read port only.

## Where this departs from the published design

- **Results are descriptors, not data.** The key and value bytes are not
  copied. The shortcut, sorted and log range-scan units are merged into one
  sequential unit per slot: 5 slots instead of 4 + 5 + 5 pipelined units.
- **Page table location.** The page table is on chip (2^20 entries) rather than
  in on-board DRAM.
- **Metadata table.** Only the 1K-entry on-chip metadata cache exists; its
  backing copy in DRAM does not.
- **Write-back.** There is no write-back locking. One clock domain serialises
  fills and invalidations.
- **Start item in the previous segment.** If the start item K_s is the last item
  of the segment before the one the shortcut search picks, it is not found.
  This only matters when a log delete removes a segment's first key.
- **Buffer limits.** Log blocks are limited to 1024 bytes and 64 entries.
  Sorted segments are limited to 1024 bytes.
- **Writes are host software.** Put, delete, merge, split and garbage collection
  are not implemented in RTL.

## Verification

Each block in `tb/` has a self-checking testbench that ends with a `TB_RESULT`
line.

`tb_honeycomb_top` runs the whole design at its default size. It uses:

- a 3-level tree built in a host-memory model (`tb_tree_pkg`);
- latency models of PCIe and DRAM;
- 200 random and directed gets and scans, each checked against a reference list.

The test also counts each mechanism and fails if any one of them never happens:

- root-cache hits, DRAM hits and misses;
- load-balancer diversions and chunk write-back;
- old-version following;
- log merge and log-version filtering;
- sibling crossing;
- leaf-slot pushback;
- a page-table remap;
- S_old catching up with S_new.

`ksu`, `msi_adapter`, `interior_engine`, `leaf_scan_unit`, `leaf_engine`,
`mem_subsystem` and `request_preprocess` are exercised only through this
end-to-end test.

Running a testbench with plain verilator:

    verilator --binary --timing --assert --top-module tb_honeycomb_top \
      rtl/hc_pkg.sv tb/tb_tree_pkg.sv rtl/*.sv tb/tb_honeycomb_top.sv
    ./obj_dir/Vtb_honeycomb_top

Verilator reports a combinational-path warning (UNOPTFLAT) on `mresp_ready`. The
path goes from the memory crossbar's `valid`, through the engines' steering
logic, to `ready`. It is not a real loop, because `ready` never feeds back into
`valid`.
