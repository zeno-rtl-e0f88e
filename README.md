# Zeno Namespace capabilities in RTL

Zeno is a capability architecture for machines built from many nodes that
share one global memory. In a conventional system a pointer is just an
address, and each node's page tables decide what it may touch. Zeno adds a
second kind of handle: a **Namespace ID**. This is a 64-bit capability that
hardware creates and software cannot forge. It names a region of an address
space, with byte-exact bounds and read/write/execute rights. Every load,
store and instruction fetch carries a Namespace ID next to its virtual
address. Hardware checks the access against that Namespace before the
address is used.

The same ID is valid on every node. Its metadata lives in a directory
spread across the nodes. Its data can sit on any node. Whichever node finally
touches memory checks the access again. A compromised node therefore cannot
reach data it holds no capability for, even through the network.

This RTL implements the hardware side of that scheme:
- the Namespace ID registers of a core;
- the Namespace instructions `NS_CREATE`, `NS_DERIVE` and `NS_REVOKE`;
- the Namespace-aware MMU (Metadata Cache, Namespace-TLB, page-table walker, permission checks);
- the checking network interface;
- a 2D-mesh interconnect that joins any number of such nodes (up to 256).

The rv64 pipeline, its L1/L2 caches and the DRAM are not included. Each node
exposes ports where they attach.

## Namespaces, IDs and the directory

A Namespace is described by one metadata record:

| word | field | meaning |
|---|---|---|
| 0 | minimum address | first virtual byte the Namespace covers (inclusive) |
| 1 | maximum address | last virtual byte (inclusive) |
| 2 | permissions | bit 0 R, bit 1 W, bit 2 X, bit 3 valid |
| 3 | page-table PPN | root of the Sv39 page table used to translate this Namespace |
| 4 | Root Namespace ID | the `NS_CREATE`d ancestor; names the address space |
| 5 | Parent ID | 0 for a root |
| 6 | child-list pointer | physical address of words 8..15 |
| 7 | number of children | |
| 8..15 | child IDs | up to 8 |

Words 0–6 follow the order of the fields in the original architecture
description. The encoding of each word and words 7–15 are this
implementation's choices.

A Namespace ID is `{home node[63:56], 40'b0, sequence[15:0]}`. The node that
executes `NS_CREATE` or `NS_DERIVE` becomes the home of the new Namespace. It
writes the record into its own part of the **Distributed Namespace Directory
(DND)**, at local address `0x100_0000 + sequence * 128`. Any node can find
any record from the ID alone; no lookup table is needed. Sequence 0 is never
issued, so each node can create 65535 Namespaces.

The directory therefore occupies local addresses `0x100_0000` to
`0x17F_FFFF` on every node (8 MiB). The hardware reaches it through the
operation unit and the MMU's metadata reads. The MMU does not check whether
a translation lands in that region. Page tables must therefore come from
trusted software that keeps directory pages out of them.

A physical address is 56 bits: `{node[55:48], local[47:0]}`. The node field
decides whether an access goes to local memory or across the network.

### Unforgeability

Each extended register carries a tag bit next to its 64-bit value.
- Only the Namespace-operation unit writes a register with the tag set.
- An ordinary write from the core clears the tag.
- The MMU refuses any access whose ID is untagged (`F_UNTAGGED`).

The one exception is the ID select `nsid_src = 0`, which sends the constant
ID 0 instead of a register. ID 0 names a default Namespace that firmware is
expected to set up, and this constant always counts as tagged.

Tags are not stored in memory. An ID therefore survives only while it stays
in the extended registers. See *Departures* below.

### The three operations

| instruction | operands | result | what the hardware does |
|---|---|---|---|
| `NS_CREATE` | min, max, R/W/X, page-table PPN | new ID | allocates the next sequence number and writes a fresh record: root = itself, parent = 0 |
| `NS_DERIVE` | min, max, R/W/X, parent ID | new ID | reads the parent's record, possibly from another node; then writes the child's record and appends the child to the parent's child list |
| `NS_REVOKE` | ID | – | clears the valid bit of the Namespace and of every descendant |

`NS_DERIVE` can only narrow. It refuses (`F_NS_OP`) in these cases:
- the child's bounds are not inside the parent's;
- the child asks for a right the parent lacks;
- min > max;
- the parent's child list is full.

A child shares its parent's Root ID and page table, so parent and children
see one address space.

`NS_REVOKE` works breadth first through a queue of 16 IDs that still need
revoking. If that queue overflows, it stops with `F_NS_OP` and leaves the
rest to firmware. Revoking an already invalid Namespace gives `F_INVALID`.
Each revoked ID is also dropped from the local node's Metadata Caches.

Each instruction runs as a single atomic sequence of 64-bit directory reads
and writes. The valid bit is written last, so a half-written record is never
valid.

## The MMU (`nlb`)

Every access presents `(ID, tag, virtual address, size, load/store/fetch)`.
In one cycle the MMU searches two structures:
- the **Metadata Cache**, keyed by the full 64-bit ID;
- the **N-TLB**, keyed by the Root ID and the virtual page number.

The Root ID is part of the N-TLB key because a Namespace and all its
descendants share one page table. They should share TLB entries. Unrelated
Namespaces must not.

Then, in order:

1. **Untagged ID** → `F_UNTAGGED`.
2. **Metadata miss** → the MMU reads words 0–4 of the record from the home
   node and fills the cache. With `MD_MISS_FAULT=1` it raises `F_MD_MISS`
   instead, leaving the refill to firmware.
3. **Permission check** (`perm_check`):
   - the valid bit must be set (`F_INVALID`);
   - the R, W or X right for the access kind must be granted (`F_PERM`);
   - every byte from `addr` to `addr+size-1` must lie inside the bounds
     (`F_BOUNDS`).

   A refused access never reaches memory.
4. **N-TLB miss** → the Sv39 walker (`ptw`) starts at the page-table PPN from
   the metadata, not at a per-process SATP register. A missing mapping gives
   `F_PAGE`. Superpage leaves are stored as the 4 KiB page that was asked for.
5. The physical access leaves on the memory port. It still carries the ID and
   virtual address, so a remote node can check it again.

Timing, counted from the cycle the request is accepted to the cycle the
response is valid, with L the memory latency:

| case | cycles |
|---|---|
| hit in both structures | 5 + L |
| metadata miss | 5 extra round trips |
| page walk | 3·(L+2)+1 |

Four 32-bit counters count hits and misses of both structures.

The default sizes are those of the FPGA configuration the architecture was
evaluated with:
- Metadata Cache: 128 entries, 8-way;
- N-TLB: 1024 entries, 8-way.

Both are flip-flop arrays with round-robin replacement.

## Nodes and the network

`zeno_node` combines the following:
- the extended register file;
- the MMU;
- the operation unit;
- a network interface;
- two round-robin `mem_arbiter`s.

The MMU and the operation unit share one path to memory. A steer sends that
path to local memory or to the network interface, by the node field of the
physical address. Local memory is also shared with the network interface's
two serving ports.

A warm local access takes **7 + L** cycles: 5 in the MMU and one in each
arbiter.

### The network interface

This is where the capability model is enforced between nodes. Requests leave
a node in two forms:

- **Namespace request**: `{ID, virtual address, access}` for data. The
  serving node pushes it through its *own* MMU, with its own Metadata Cache,
  N-TLB and permission check. Only then does it touch its memory. If the
  translation the serving node computes does not land in its own memory, the
  request is refused with `F_NET`. A node cannot use another node as a proxy.
- **sys request**: a plain physical read or write. The MMU walker and the
  operation unit use it for directory records and page tables, which belong
  to hardware.

Each node has three routers, one per physical network: Namespace requests,
sys requests and responses. This prevents deadlock between requests and
responses:
- a sys request only ever waits for local memory;
- a Namespace request can wait for sys requests, because its serving MMU may
  fetch metadata or page-table entries from a third node;
- responses are always accepted.

No cycle of waits can form. The serving MMU sends its own remote reads
through a second client channel for the same reason.

### Routers

`mesh_router` has five ports: local, y−1, x+1, y+1, x−1. It uses 2-entry
input FIFOs, XY routing and round-robin output arbitration. A hop costs one
cycle when uncontended. Node `n` sits at `(n mod MESH_X, n div MESH_X)`.
Packets are single flits that carry a whole request or response.

## Files

| file | contents |
|---|---|
| `rtl/zeno_pkg.sv` | formats, record layout, fault and operation codes, packet types |
| `rtl/ext_regfile.sv` | tagged Namespace-ID registers and the ext1/ext2/0 ID select |
| `rtl/perm_check.sv` | valid / R-W-X / bounds / tag check |
| `rtl/md_cache.sv` | Metadata Cache |
| `rtl/ntlb.sv` | N-TLB |
| `rtl/ptw.sv` | Sv39 walker |
| `rtl/nlb.sv` | the MMU |
| `rtl/ns_op_unit.sv` | `NS_CREATE` / `NS_DERIVE` / `NS_REVOKE` |
| `rtl/mem_arbiter.sv` | round-robin memory arbiter |
| `rtl/network_interface.sv` | checking NI |
| `rtl/mesh_router.sv` | mesh router |
| `rtl/zeno_node.sv` | one node |
| `rtl/zeno_system.sv` | top: `MESH_X × MESH_Y` nodes, 2×2 by default |
| `tb/dram_model.sv` | behavioural word memory with fixed latency, used by testbenches |
| `tb/<module>_tb.sv` | self-checking testbench of each module |
| `tb/zeno_random_access_tb.sv` | random-access workload on the full system |
| `tb/zeno_integer_sort_tb.sv` | bucket-sort data movement on the full system |

The top's ports are arrays indexed by node number:
- `core_*` and `nsop_*`: the pipeline side;
- `dram_*`: memory;
- the counters;
- `mmu_flush`.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. For
example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
  rtl/zeno_pkg.sv tb/zeno_system_tb.sv --top-module zeno_system_tb
./obj_dir/Vzeno_system_tb
```

`zeno_system_tb` runs the top at its default parameters: 4 nodes, full-size
MMUs, memory latency 100. It takes a few seconds and covers the following:
- every node creates a Namespace at the same time;
- a transfer test: every node writes and then reads pages that live on all
  four nodes, so most accesses cross the mesh and are checked remotely;
- warm local latency (7 + L);
- derive, with its refusal cases;
- bounds, permission, page and forged-ID faults;
- revocation of a parent and its child.

It then checks counters of every mechanism:
- metadata and TLB hits and misses;
- packets on each network, with responses equal to requests;
- each kind of operation.

`zeno_random_access_tb` runs a random-access workload on the same
full-size system:
- each node creates 32 Namespaces of 32 KiB, 128 in all;
- each Namespace's pages are spread over all four nodes;
- each node makes 1024 random 4-byte loads and stores, checked against a
  shadow copy;
- one access in sixteen presents the wrong Namespace's ID and must be refused.

It checks two counts:
- the Metadata Cache misses exactly once per Namespace;
- the N-TLB misses at least once per distinct page touched, and no more than
  once per access.

`zeno_integer_sort_tb` runs the data movement of a bucket sort of 65536
4-byte keys:
- every node loads its 16k keys through one Namespace;
- it stores each key into one of its 31 bucket Namespaces, whose pages sit
  on all four nodes;
- the buckets are then compared with the expected contents, read directly
  from memory.

It runs for about a minute.

The smaller testbenches drive one block against independently computed
results, each with a watchdog. `zeno_node_tb` and `network_interface_tb` play
the network by hand.

## Departures and limits

- **No pipeline, caches or remote-memory cache.** Accesses go straight from
  the MMU to memory or the network. The intended remote-memory cache would
  keep copies of remote data in local DRAM, with software-managed coherence.
  It is not built, so every remote access crosses the mesh.
- **Tags are on chip only.** The architecture keeps tag bits in memory too,
  and its pipeline has extended loads and stores that move IDs between
  registers and memory. Neither is built here. IDs therefore live only in
  the extended registers and cannot be stored in data structures and
  reloaded.
- **IDs cannot be handed to software on another node.** Each core can use
  the Namespaces it created itself and the default ID 0. The data of those
  Namespaces can still lie on any node. The node that serves that data
  fetches the metadata from the creating node's directory.
- **One core per node.** The architecture allows several cores per node.
  Here each node has one core's Namespace logic and one MMU, next to the
  network interface's own MMU.
- **Revocation is local to the caches of the revoking node.** Other nodes
  may keep a cached copy of the metadata until it is evicted or they flush
  (`mmu_flush`). Stale copies are not invalidated across nodes.
- **Concurrent derives** of one parent from two nodes can race on the
  parent's child count. No directory locking is implemented.
- **Network packets carry no tag.** A serving node trusts that a Namespace
  request from another network interface carries a genuine ID. It still
  checks bounds, rights, validity and translation.
- The record encoding, ID format, memory map, child-list limit of 8, revoke
  queue of 16, fault order and codes, arbitration and routing are all
  choices of this implementation.
- A core write to the extended registers in the same cycle as a finishing
  Namespace operation is lost. The core must wait for `nsop_done`.
- The router takes one cycle per uncontended hop. The system-level
  evaluation of the architecture assumed 30 cycles per hop on average. That
  figure is not reproduced, because the router's internals were not
  published.
