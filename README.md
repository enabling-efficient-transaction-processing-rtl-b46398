# CtXnL: a hybrid-coherence CXL shared-memory device, in SystemVerilog

A rack of hosts that share one CXL fabric-attached memory (G-FAM) can run a
transaction system directly on shared memory, but CXL's strict hardware
coherence makes every store to a shared line a cross-node round trip, and the
inclusive snoop filter that tracks all host caches limits how much memory and
how many nodes the device can serve. Transaction records do not need that
strictness: a record written by a transaction that has not committed must not
be seen by anyone else anyway, and only at commit does the write have to
become globally visible.

This design moves the decision of *when* a line becomes coherent from the
hardware to the software. Each host sees the device memory through a
*loosely coherent* segment in which loads and write-backs are private to the
node: a write-back does not reach the shared copy but is parked as the node's
private *view* of the line. When a transaction commits, software asks the
device to *publish* the line (GSync) or to throw the view away (Wd). Publishing
invalidates the line everywhere else and merges the view into the shared copy.
Metadata that needs strict coherence (locks, indexes) stays in an ordinary
CXL-coherent segment. No snoop filter is needed for the loosely coherent
segment: each node's agent only tracks its own host, and a publish is a
broadcast on a bus inside the device.

The RTL implements the device side: one CtXnL hardware agent (CTHW) per
connected node, the snoop bus that connects them, and the path to the shared
DRAM. The CXL controller IP, the standard coherent path, the DRAM controller
and the hosts are outside and appear as ports.

## Vocabulary

| Term | Meaning |
|---|---|
| EMS | exposed memory store: the shared copy of every line, in device DRAM |
| view | a node's private, not yet published version of a line |
| VMS | view memory store: the DRAM area where views that overflowed from a host's cache are kept |
| L-Ld / L-St | a host load / dirty write-back in the loosely coherent segment |
| GSync | publish one line: invalidate it on all other nodes, merge this node's view into the EMS |
| Wd | withdraw one line: discard this node's view |
| VF | VMS filter: bloom filter of lines that may have a view in the VMS |
| VBF | VMS back filter: counting bloom filter of lines the host may hold in its cache |
| VAT, VATE | view address table (cuckoo hash from line to VMS slot) and one of its entries |
| indicator | the 56-bit key of a view: node id plus line address |
| CTRt | the runtime helper thread on the host that reconfigures the device (software) |

## Three views of the same memory

The 16 GB of shared DRAM (2^28 lines of 64 bytes) is mapped three times into
each host's physical address space. The two top bits of the 30-bit line
address choose the *primitive* (`seg_router`):

| bits [29:28] | segment | served by |
|---|---|---|
| 0 | CtXnL, loosely coherent | translation flow (L-Ld / L-St) |
| 1 | CXL-vanilla, strictly coherent | leaves on the `van_*` port to the standard coherent path |
| 2 | hardware configuration | register window (lines 0..8191) and raw DRAM above it |
| 3 | unused | answered at once with zero data |

The offset inside each segment is the DRAM line address, so the same record
can be reached loosely or strictly. The configuration segment is how the
runtime builds the VAT tables in DRAM, reads occupancy and fixes overflows.

## The private path: L-Ld and L-St (`xlate_flow`)

A host only sends a load to the device when it misses its whole cache
hierarchy, and only sends a store when it evicts a dirty line. So:

* **L-St (dirty write-back).** The line becomes a view. It is inserted into
  the VAT with its 64 bytes of data and never written to the EMS. The VF then
  records the line, and the VBF forgets it (the host no longer holds it).
* **L-Ld (load).** The VBF records that the host now holds the line. The VF is
  asked whether a view may exist. On a VF miss the EMS line is returned; that
  answer is exact, so most loads cost one DRAM read, as for plain memory. On a
  VF hit the VAT is walked. If the view is there, its data is returned and its
  VATE removed, because the line is back in the host cache. If it is not there
  (a false positive), the EMS line is returned.

The VF is 4096 one-bit cells in two banks, one per hash (512 bytes, as the
paper). At 1,400 inserted lines it gives 24% false positives in simulation.
Bits are never cleared individually: a stale bit only costs a VAT walk.

The VBF must never answer "no" for a line the host holds, since it decides
whether a back-invalidation is sent. It is therefore a counting filter: 16 KB
of 4-bit counters, two banks of 16,384. A counter that reaches 15 sticks,
which makes overflow safe. The paper quotes a capacity for the VBF that only
one-bit cells could reach (53K items at 25% false positives); with counters in
the same 16 KB the figure is about 11K items. A remove for a line whose
insert was never seen (which the CTHW does not issue, except after a false
positive lets a write-back through) can decrement a counter another line
shares. That is a known weakness of counting bloom filters and is not guarded.

## The view address table (`vat_lut`, `vat_engine`)

This is the hardest part of the design.

**Key.** A view is named by a 56-bit indicator:

```
 55    52 51         40 39        28 27                0
+--------+-------------+------------+-------------------+
| node id| line[27:16] |  zero      |  line[27:0]       |
+--------+-------------+------------+-------------------+
 \__ 16-bit LUT index _/ \______ 40-bit hash tag ______/
```

The top 16 bits select an entry of an on-chip lookup table. The node id is
fixed per CTHW, so each agent stores only the 4,096 entries of its own node.
Each entry names one of 16 cuckoo hash tables. The 12 prefix bits are the 4 MB
region of the line. The runtime can therefore give busy regions tables of
their own. Each table has a descriptor (valid, base line in DRAM) and an
occupancy counter.

**Table.** A table is a two-way cuckoo hash with 2^19 entries per way (1M
entries, 8 MB of VATEs). Way 0 is indexed by H1(tag) and way 1 by H2(tag).
Both are multiplicative hashes with different odd constants. A VATE is
64 bits: bit 63 valid, bits 55..0 the indicator. Eight VATEs share a DRAM
line. Entry *f* = way × 2^19 + index is word *f* mod 8 of line
`base + f/8`. Its view data lives in a preallocated slot at line
`base + 2^17 + f`. A displaced entry carries its data with it, so no
allocator is needed.

**Operations.**

* *Lookup* reads the way-0 line, then the way-1 line, and compares the stored
  indicators. It never takes more than two DRAM reads. Fast lookups are why
  cuckoo hashing was chosen: loads are on the critical path, write-backs are
  not.
* *Insert* first checks both ways for the key; if it is present, only the
  data slot is rewritten. Otherwise the entry goes to an empty way. If both
  ways are full, the way-0 occupant is evicted and re-inserted at its other
  location. That may displace another entry, and so on, up to `MAX_RETRY` (64)
  displacements.
* *Remove* clears one VATE.

**When an insert fails.** After 64 displacements one entry is left homeless.
The engine keeps that entry and its data in a park register and raises the
resize error (interrupt to the runtime). It then *blocks*: lookups and inserts
wait. The write-back that caused the failure is still acknowledged to the host,
because its data is safe in the park register. An insert into a table whose
descriptor is invalid fails the same way. The runtime then resizes through the
configuration segment. The end-to-end testbench does this:

1. read the status register (error and blocked bits set);
2. allocate a new table, copy the VATEs (and data slots) of the prefixes being
   moved into the same positions of the new table, clear them in the old one;
3. write the new table's descriptor, the LUT entries of the moved prefixes and
   the occupancy counts of both tables;
4. write 1 to status bit 0. The engine retries the parked entry from the start
   and unblocks.

The CSR path does not need the shared-resource lock (next section). The runtime
can therefore always reach the registers, even while the VAT is blocked.

A resize the runtime starts on its own, because a table crossed its occupancy
threshold, follows the same steps 2 and 3. It is bracketed by setting and
clearing the hold bit of the control register. While the bit is set, the
engine finishes the operation in progress and then accepts no new one, so no
lookup can miss a view that is being moved. The paper's occupancy threshold
policy (resize at 0.6, shrink at 0.01, every 10 ms)
belongs to the runtime; the hardware exposes the counters it needs.

## Publishing a line: GSync and Wd (`cc_agent`, `snoop_bus`, `snoop_peer`)

**Work and completion queues.** The host posts a request by writing a work
queue element (WQE) into host memory:

* one line per element;
* bit 63 valid, bit 62 operation (0 GSync, 1 Wd), bits 27..0 the line.

The agent polls the head element over the CXL IP's coherent device-to-host port
(`cc_*`). Because the valid bit is inside the element, one read returns the flag
and the payload together. After reading a valid element, the agent writes it
back as zero.

The completion queue is one line, one bit per WQE, so the ring holds 512
elements. Completion of element *i* toggles bit *i*. The host compares
against the value it saw before posting, so it never needs to clear a bit.
When the queue is empty, the agent waits `POLL_GAP` cycles between polls.

**GSync, as the requester.**

1. Broadcast the line on the snoop bus. Every other CTHW runs its peer
   datapath and acknowledges. The bus signals `done` after the last
   acknowledgement.
2. Merge. If the VBF says the host may hold the line, send a CXL.BI BISnpInv.
   A dirty answer is written to the EMS. Otherwise, or on a clean answer, look
   for a view: if the VF hits and the VAT has a view, copy the view from its
   VMS slot to the EMS and remove the VATE.
3. Toggle the completion bit.

**The peer.** On a broadcast, a peer whose VF hits looks the line up in its
VAT and removes any view it finds. The view is discarded, not merged: it was
written over an older version of the line. If its VBF hits, the peer
back-invalidates its host's copy and ignores the returned data. It then
acknowledges.

**Wd.** There is no broadcast, because no other node can see an unpublished
view. The host's copy is back-invalidated and its data dropped, and any VMS
view is removed.

**The snoop bus** carries only addresses. It runs one broadcast at a time and
arbitrates among requesters round-robin. A requester keeps its request up until
`done`, and is never granted again in the cycle its `done` is high. With an idle
peer, a broadcast takes 2 cycles from request to `done` on the bus. At the agent
level an idle peer acknowledges 5 cycles after the snoop arrives: lock
arbitration plus filter checks.

## One agent, three clients (`cthw`)

Three independent machines in a CTHW use the same filters, VAT engine and
CXL.BI port: the translation flow, the CC agent and the peer. A client raises a
lock request and drives the shared resources only while it holds the grant.
The grant is registered, has fixed priority peer > CC agent > translation, and
is held until released.

The priority and the lock discipline are what keep the device deadlock-free:

* A CC agent waiting for the bus does not hold the lock. The peer of the same
  node can therefore always answer another node's broadcast.
* A peer only ever waits for its own host's BI answer. Every broadcast
  therefore completes.
* While the VAT is blocked after an insert failure, a translation that holds
  the lock waits. Peers of that node wait behind it until the runtime has
  resized, and broadcasts from other nodes stall meanwhile. The runtime's
  configuration path does not use the lock, so it always finishes.

The DRAM port of the CTHW is shared by the VAT engine, the translation flow,
the CC agent and the register block through a round-robin arbiter (`mem_arb`).
One request is in flight at a time. The device combines the 16 CTHWs'
DRAM ports the same way.

## Configuration registers (`cthw_csr`)

Lines of the configuration segment below 8192 are registers. The value is in
the low 64 bits of the line. Everything above goes straight to DRAM.

| line | register |
|---|---|
| 0x0000-0x0FFF | LUT entry *i*: table id |
| 0x1000 + *t* | table *t* descriptor: [63] valid, [27:0] base line |
| 0x1010 + *t* | table *t* occupancy; writing sets it |
| 0x1020 | status: [0] resize error (= interrupt), [1] VAT blocked; writing 1 to bit 0 restarts the parked insert |
| 0x1021 | work queue base line (in host memory) |
| 0x1022 | completion queue line |
| 0x1023 | control: [0] enable work-queue polling, [1] hold the VAT (no new lookup or insert is accepted) |
| 0x1024 | VF inserts since reset (read only) |

Registers answer one cycle after the request is accepted.

## Modules

| module | role |
|---|---|
| `ctxnl_pkg` | widths, request/response structs, hashes, indicator layout, counters |
| `ctxnl_gfam` | top: `N_NODES` CTHWs, snoop bus, DRAM arbiter |
| `cthw` | one node's agent: router, filters, VAT, three clients, lock, DRAM arbiter, counters |
| `seg_router` | primitive segment decode and response merge |
| `xlate_flow` | L-Ld / L-St |
| `cc_agent` | work/completion queues, GSync/Wd requester |
| `snoop_peer` | peer side of a broadcast |
| `snoop_bus` | broadcast bus with acknowledgement |
| `vms_filter`, `vms_back_filter` | VF and VBF |
| `vat_lut`, `vat_engine` | VAT lookup table and cuckoo-hash engine |
| `cthw_csr` | configuration registers and raw DRAM window |
| `mem_arb` | round-robin N-to-1 line-port arbiter, one request in flight |

Every interface is valid/ready on requests. Responses are valid/ready (host
side) or valid only (DRAM, BI, coherent queue port: every request gets exactly
one response, in order). Default parameters are the paper's sizes:

* 16 nodes;
* 512 B VF and 16 KB VBF with two hashes each;
* 16 tables of 2 × 2^19 VATEs.

The retry limit of 64 and the poll gap of 8 cycles are this design's own
choices. Each `cthw` exposes event counters (`cthw_stats_t`) for loads, stores,
filter hits and false positives, kicks, failures, GSyncs, BISnpInvs sent,
snoops and per-segment requests.

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert --top-module tb_ctxnl_gfam \
    rtl/ctxnl_pkg.sv rtl/*.sv tb/tb_ctxnl_gfam.sv -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Each unit has its own testbench (`tb_<module>`), checked against a reference
model written independently in the testbench:

* bloom filter false-positive rates;
* counting and saturation in the VBF;
* cuckoo placement, the two-read lookup bound, overflow, park and retry;
* the GSync/Wd queue protocol;
* bus fairness and latency;
* peer behaviour;
* the register map.

`tb_ctxnl_gfam` runs the device end to end with 4 nodes and tiny VAT tables,
so that overflow and a runtime resize happen. It models the hosts, their
caches, the queues and the runtime. It walks through:

* view isolation;
* publication with back-invalidation;
* a merge from the VMS;
* a peer view drop;
* a withdraw;
* two GSyncs contending for the bus;
* a table overflow, interrupt, resize and retry;
* the vanilla and unmapped segments.

It fails if any mechanism never happened. `tb_ctxnl_gfam_full` instantiates
the device with every default (16 nodes, full-size filters and tables) and runs
one complete store / reload / GSync / cross-node load.

## Where this departs from the paper, and what is not here

* **Indicator layout.** The paper gives the indicator as 56 bits: a 4-bit node
  id and a 48-bit EMS address, with the top 16 bits going to the LUT and the
  other 40 to the hashes. It does not say which address bits land where. Here
  the 16-bit index is the node id plus 12 region bits, and the 40-bit tag holds
  the 28-bit line address that a 16 GB memory needs.
* **VBF capacity.** The paper's counting filter and 16 KB size are followed,
  not its 53K-item capacity (see above).
* **Translation flow.** The paper's figure routes stores through the VF
  check; the text (every dirty write-back becomes a view) is followed.
* **Own choices, not from the paper:**
  * the hashes;
  * the VATE and WQE formats and the table layout;
  * the register map;
  * the lock and arbitration scheme;
  * the retry limit;
  * the unmapped-segment behaviour;
  * removing a VATE when a load brings the view back to the host;
  * the Wd datapath.
* **Not designed here.** The CXL IP, PHY, the strict-coherence path with its
  snoop filter, the DRAM controller, the hosts and the software (library and
  runtime) are outside. The runtime's resize policy exists only as the model
  in the end-to-end testbench.
* **Performance.** One request per node is in flight in the translation flow,
  and one DRAM request is in flight per arbiter. The design is
  functional-first and does not reproduce the paper's throughput; nothing here
  is timing-closed for a particular FPGA or process.
