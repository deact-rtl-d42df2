# DeACT: translate at the node, check at the fabric

In a system where many compute nodes share a pool of fabric-attached memory
(FAM), each node's operating system manages its own flat "node physical"
address space. A second, system-level mapping turns node pages into FAM pages,
and the system, not the node, must check every FAM access. The obvious way to
do this puts both the mapping and the permission check in a small
translation unit beside each node's fabric port, the STU (system translation
unit). Its cache is small, so many accesses pay for a four-level page walk
across the fabric.

DeACT (decoupled access control and address translation) splits the two jobs:

* **Translation moves into the node.** A *FAM translator* in the node's memory
  controller keeps a large cache of node-page to FAM-page mappings in the
  node's own DRAM. This is the FAM translation cache, or FTC. The node is
  allowed to know where its pages live in FAM.
* **Permission stays outside the node.** The node cannot be trusted with
  permissions. Every FAM page therefore has a small access-control word (ACM,
  access control metadata) at a fixed place in FAM, computed from the FAM
  address alone. The STU checks the FAM address the node sends against that
  word, and it caches only these words. Freed of mappings, its cache holds
  twice as many pages.
* **Misses still go to the STU.** When the FTC misses, the request goes to the
  STU untranslated. The STU walks the node's FAM page table, returns the
  mapping so the node can cache it, checks the access and forwards it.

This repository holds synthesizable SystemVerilog for one node's half of that
scheme: the FAM translator and its helpers, plus the STU with its ACM cache,
permission check, page walker and page-walk cache. It also holds self-checking
testbenches, including an end-to-end run at full size. The main configuration
is the one called DeACT-N: a 16-bit ACM, with two {tag, ACM} pairs packed into
each STU cache way.

## Address map

The node sees one flat physical space:

| node address                  | meaning                                         |
|-------------------------------|-------------------------------------------------|
| `< cfg_fam_base`              | local DRAM, passed through untouched            |
| `cfg_ftc_base` ... `+1 MB`    | the FTC itself (inside local DRAM)              |
| `>= cfg_fam_base`             | FAM zone: node page must be translated          |

FAM holds three kinds of system data, placed by the memory manager ("broker").
Their bases are given to the STU as `cfg_mt_base`, `cfg_bm_base` and
`cfg_ptw_root`:

* **ACM region.** There is one 16-bit word per 4 KB FAM page, so 32 of them
  fill one 64-byte line. For FAM byte address X the line is at
  `MT + (X >> 17) * 64`, and the word is slot `(X >> 12) mod 32`, i.e. bits
  `[16*slot +: 16]`.
  * Word format: `{node_id[13:0], perm[1:0]}`.
  * Permission codes: 0 none, 1 read, 2 read/write, 3 read/write/execute.
  * A node ID of all ones (`0x3fff`) marks a shared page. For example,
    `0xfffd` is a shared page with read permission.
* **Sharing bitmaps.** Each 1 GB region of FAM has a 64 Ki-bit bitmap (8 KB),
  one bit per node ID. The row for node n of the region holding X is at
  `BM + (X >> 30) * 8192 + (n >> 9) * 64`, at bit `n mod 512`. A shared page is
  allowed only if the requester's bit is set *and* the permission bits allow
  the operation.
* **FAM page table (one per node).** It has four levels of 512 64-bit entries
  over node page bits [35:0].
  * Entry format: bit 0 = present, bits [63:12] = FAM page of the next table or
    of the data.
  * FAM page 0 is never a data page. The ACM and bitmaps sit at the bottom of
    FAM, and a zero FTC value means "empty".

## FAM translator (`fam_translator`)

The FAM translator runs two state machines that share one DRAM port through a
lock. The response side wins ties.

**Request side**, one LLC request at a time:

1. Local addresses go to DRAM and, for reads, come back to the LLC.
2. For a FAM address, read the FTC line at
   `cfg_ftc_base + (node_page mod 16384) * 64`. The line holds four 104-bit
   `{node page, FAM page}` entries.
3. `ftc_tag_match` compares all four tags in one cycle. A multiplexer selects
   the matching FAM page and defaults to 0, so a result of 0 means miss.
4. On a hit, send the request to the STU with the FAM address and `V = 1`. On a
   miss, send it with the node address and `V = 0`.
5. Reads and instruction fetches expect data back. They need an entry in the
   outstanding mapping list, and the request waits while the list is full.
   Writes are posted and take no entry.

**Response side**, for each STU response:

* **Memory data** (`RSP_MEM`) carries a FAM address. The list gives back the
  node page, the entry is freed, and the data goes to the LLC under the node
  address.
* **Refusal** (`RSP_FAULT_FAM`) is handled the same way but reaches the LLC with
  `fault = 1`.
* **Walk failure** (`RSP_FAULT_NODE`) already carries the node address. The LLC
  gets `fault = 1`.
* **Mapping** (`RSP_MAP`) fills the list entry of the missed request, which was
  "pending" (node page known, FAM page not yet). The FTC line is then rewritten
  by read-modify-write. `ftc_line_update` picks the entry to write: one already
  holding this node page, else an empty one, else a random one from a 16-bit
  LFSR.

**FTC invalidation.** When a job moves, the memory manager drops its node
pages from the FTC through `ftc_inv_valid`/`ftc_inv_npn`. The response side
accepts an invalidation only while no STU response is waiting. It then reads
the page's FTC line and writes it back with that page's entry cleared. Requests
already past the lookup keep the old mapping, so the job must be quiesced
first.

With a DRAM that answers in one cycle, a FAM read reaches the STU port 5 cycles
after the LLC hands it over:

1. accept;
2. take the DRAM lock;
3. issue the FTC read;
4. receive the data;
5. match and send.

Any extra DRAM latency adds directly to this.

### Outstanding mapping list (`outstanding_mapping_list`)

FAM answers with FAM addresses, but the LLC only knows node addresses. The
list holds up to 128 requests that await data, each as
`{valid, filled, node page, FAM page}`.

* An FTC hit enters a *filled* entry.
* An FTC miss enters a *pending* entry, keyed by node page. It becomes filled
  when the mapping response comes back, which is always before that request's
  data.
* Lookups are combinational, lowest index first. Two requests to the same page
  are interchangeable because the response carries the full line address.

## STU (`stu`)

The STU handles one request at a time. FAM data on its way back to the node
passes through it in parallel, and the STU's own responses take priority over
passing data.

**Mapped request** (`V = 1`):

1. `acm_cache` is looked up with the FAM page; the result comes one cycle later.
2. On a miss, the ACM line is read from FAM and the page's word is installed.
3. `acm_check` decides.
   * For a private page: the owner ID must equal `cfg_node_id` and the
     permission must allow the operation.
   * For a shared page: the bitmap row is read from FAM, and the requester's bit
     must be set.
4. An allowed request goes to FAM unchanged. A refused read or fetch is answered
   with `RSP_FAULT_FAM`. A refused write is dropped.

With a cache hit, the request leaves for FAM 4 cycles after the STU accepts it.

**Unmapped request** (`V = 0`):

1. `fam_ptw` walks the page table over the same fabric port. All STU-internal
   reads are tagged `src_stu` so their data is not sent to the node.
2. If the walk fails (entry absent, node page beyond 36 bits, or FAM page 0),
   reads get `RSP_FAULT_NODE`.
3. Otherwise the STU first sends `RSP_MAP` to the node.
4. It then checks the now-translated request exactly as for `V = 1`. The node
   has therefore always accepted the mapping before any data for that request
   can arrive.

`inv_valid`/`inv_pn` removes one page's ACM from the cache, for use when the
broker migrates a job. `ptw_flush` empties the page-walk cache after a page
table changes.

### ACM cache, DeACT-N layout (`acm_cache`)

The STU cache has 1024 ways: 128 sets of 8. A way is 120 bits wide, the size of
an entry in a conventional combined design:

* 52-bit tag;
* 52-bit FAM page;
* 16-bit ACM.

With the mapping gone, the way is cut into two sub-ways of `{44-bit tag, 16-bit
ACM}`, giving 16 independent sub-ways per set.

* Set index = FAM page bits [6:0]. Tag = bits [50:7].
* FAM pages from 2^51 upward cannot be tagged, and `acm_check` refuses them.
  That is still 8 PB of FAM.
* Each sub-way has its own valid bit.
* Replacement order: the sub-way already holding the page, else an invalid
  sub-way, else a random one from an LFSR.

### Page walker and page-walk cache (`fam_ptw`)

The walker reads one 64-byte line per level, top level first. It keeps a
32-entry fully associative page-walk cache of upper-level entries. Each entry
holds `{level L, node page bits above level L's index, FAM page of the level-L
table}`.

* A walk starts at the deepest cached level, so consecutive misses in the same
  2 MB of node space need only the last read.
* Every present upper-level entry that is read is installed, round-robin.
* A walk of n reads with fabric round-trip R cycles finishes `n*(R+1)+2` cycles
  after `start`.
* 1 GB pages: a level-2 entry with bit 7 set ends the walk. The FAM page is the
  1 GB base from entry bits 63:30 plus node page bits 17:0. The paper puts
  shared pages in 1 GB pages. It gives no entry format, so bit 7 (as in x86-64)
  is this design's choice. The result is one 4 KB mapping, cached in the FTC as
  usual. `ev_walk_large` pulses when a walk ends this way.

## Interfaces

`deact_top` connects the translator to the STU and brings everything else out
as plain ports:

* `llc_req` / `llc_resp`: `{op, address, data}` in, and
  `{fault, address, data}` out. The op is read, write or instruction fetch.
* `dram_req` / `dram_resp_*`: 64-byte lines, read data in order.
* `fab_req` / `fab_resp`: `{src_stu, we, FAM address, data}`, responses in any
  order.
* `cfg_*`: static configuration written by the memory manager.
* `ftc_inv_*`, `inv_*`, `ptw_flush`: invalidations for page migration and for
  page-table changes.
* `ev_*`: one-cycle pulses for FTC hit, miss and update; ACM hit and miss;
  FTC invalidation; walk, walk read, page-walk cache hit and 1 GB page walk; shared-page
  check; and refusal.

All channels are valid/ready. A sender keeps its payload stable until it is
accepted, and assertions check this. All packet types live in `deact_pkg`.

Size at the default parameters:

| | yosys generic synthesis |
|---|---|
| cells | about 3600 |
| flip-flop bits | 5600 |
| memory bits | 139 000, mostly the ACM cache array |

## Where this RTL departs from or adds to the paper

* The paper gives the FTC's four-way organisation and says a random entry is
  replaced. Here an entry with the same node page, then an empty entry, are
  taken first. This keeps duplicates out and fills a set completely before
  evicting.
* These points are this design's own choices:
  * the ACM bit layout;
  * the permission encoding (two bits cannot hold three independent flags);
  * the scaling of the ACM formula `MT + X/(4096*32)` to a 64-byte line index;
  * the placement of the bitmaps;
  * the page-table entry format.
* How a refusal reaches the node is not described in the paper. Here a refused
  read or fetch returns a response with `fault` set, and a refused write is
  dropped.
* Shared pages are 1 GB pages, as in the paper. The page table has a 1 GB leaf
  entry, but the FTC still holds 4 KB mappings, so a 1 GB page takes one FTC
  entry per 4 KB page used. The paper does not say how the FTC handles large
  pages.
* For page migration, all three invalidation steps are built: the FTC entry in
  DRAM, the ACM in the STU cache, and a flush of the page-walk cache.
  Rewriting the ACM words in FAM is the memory manager's job. So is assigning
  logical node IDs.
* The paper evaluates variants that are not built: DeACT-W (four contiguous
  pages' ACM per way), 8- and 32-bit ACM, and three pairs per way.
* The paper's baseline designs are not built either: the conventional STU that
  caches mappings, and the fully insecure design.
* The LLC, DRAM, fabric, FAM and the memory manager are outside the design.
  They appear only as behavioural models in `tb/`.

## Sizes against the evaluated workloads

The evaluated applications average 309 MB, with 80 % of it in FAM: about
63 000 pages of 4 KB. The default 1 MB FTC holds 65 536 mappings, so it can
reach 256 MB. The FTC, ACM cache and page-walk cache are caches, so larger
footprints still run, at a lower hit rate. The 128-entry outstanding list
matches 4 cores with 32 misses each. The STU cache parameters (`SETS`, `WAYS`,
`TAG_W`) cover the studied 256 to 4096 entries. For 8 ways use
`TAG_W = 51 - log2(SETS)`. Only the default size has been simulated.

## Testbenches

Each `tb/tb_<block>.sv` is self-checking, has a watchdog, and ends by printing
`TB_RESULT checks=<n> failures=<n>`. The behavioural models are:

* `dram_model`: a fixed-latency line memory;
* `fam_model`: FAM plus fabric, with a fixed latency and helpers to poke
  64- and 16-bit words.

`tb_deact_top` is the end-to-end test at the default parameters. It acts as:

* **the memory manager.** It builds page tables, ACM words and bitmaps for about
  200 node pages in seven classes: owned read/write, read-only,
  read/write/execute, owned by another node, shared with the node's bit,
  shared without it, and unmapped. Five extra pages collide in one FTC set.
* **the LLC.** It issues 3000 random reads, writes and fetches without waiting
  for answers. It then invalidates the FTC entries of 20 pages and reads them
  again, and finishes with a burst of 200 reads.

FAM answers after 1120 cycles: 500 ns of fabric plus a 60 ns read at 2 GHz. The
testbench checks every response, and the final FAM and DRAM contents, against a
shadow copy. It requires each mechanism to have happened at least once:

* local access;
* FTC hit, miss, update, invalidation and eviction;
* ACM hit and miss;
* walk, page-walk cache hit, 1 GB page walk and walk fault;
* shared check;
* refusal;
* a stall on a full outstanding list.

To reach that stall, the DRAM model answers in 1 cycle. Typical output: FTC hit
rate 87 %, ACM hit rate 93 %, and the list peaking at 128.

`tb_deact_workload` stands in for an application, also at the default
parameters. To this path, applications differ only in footprint and in how
often they miss the LLC. It streams over 2048 node pages (8 MB) backed by
consecutive FAM pages, three times:

* **cold pass.** Each page must miss the FTC once and be walked once.
* **warm pass.** A mix of reads and writes that must cause no FTC miss and no
  walk, because 2048 pages sit in distinct FTC sets.
* **random reuse.** Again no FTC miss.

In the warm pass every ACM lookup hits. Each read and the final FAM image are
checked against a shadow copy. Real footprints (about 63 000 FAM pages) are
too slow to simulate, but they are within the FTC's 65 536 mappings.

To run one testbench:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_deact_top rtl/deact_pkg.sv tb/tb_deact_top.sv
    ./obj_dir/Vtb_deact_top
