# MI6 uncore: a last-level cache with strong timing independence

MI6 runs enclaves on a speculative out-of-order processor. Two programs
in different protection domains must not be able to learn anything about
each other through shared hardware, and that includes timing. Per-core
state (L1 caches, TLBs, branch predictor) is handled by flushing it when
the core changes domain. The shared last-level cache (LLC) cannot be
flushed, because other cores keep using it. So it is built so that **the
cycle at which any message of core *i* moves through the LLC depends only
on what core *i* (and cores in its own domain) did**. The same holds for
the DRAM controller behind it. This property is called strong timing
independence.

This repository holds SystemVerilog for the parts of a two-core MI6
machine that MI6 changes or adds:

* the shared LLC with its coherence directory, MSHRs (miss status holding
  registers), queues and arbitration;
* a constant-latency DRAM controller;
* four small security units for each core:
  * a DRAM-region permission check;
  * a guard on machine-mode instruction fetch;
  * a gate that stops speculation in machine mode;
  * a purge sequencer that flushes per-core state.

The out-of-order cores, the DRAM devices and the security monitor
software are not included. `mi6_top` brings out every signal that would
connect to them as a port.

## 1. Machine and address map

| Item | Value |
|---|---|
| Cores | 2 |
| Physical memory | 2 GB: 31-bit physical address, 64 B lines, 25-bit line address `A` |
| LLC | 1 MB, 16 ways, 1024 sets, 512-bit lines |
| DRAM regions | 64 equal regions of 32 MB; region `R = A[24:19]` |
| DRAM controller | 120-cycle latency, up to 24 requests in flight |
| MSHRs | 6 per core, 12 in total |

**Cache partitioning by region.** The LLC set index is not the low bits
of the address. It is `{R[5:0], A[3:0]}`, and the tag is `A[18:4]`
(functions `set_of`, `tag_of` and `addr_of` in `llc`). Every DRAM
region therefore owns its own 16 LLC sets. An enclave is given whole
regions, so it is also given the cache sets that hold them. Nothing
outside its regions can evict its lines, and it cannot evict anyone
else's. The same function gives `{R, A[7:0]}` for a 16 MB
LLC with 2^14 sets (`LLC_SET_BITS=14`).

## 2. How messages flow through the LLC

Each core has one link to the LLC, made of three FIFOs:

* upgrade requests from the L1 ("give me line X in state S or M");
* downgrade responses from the L1 (the L1 gave up a line, with data if it
  was dirty);
* messages to the L1: upgrade responses and downgrade requests.

The LLC sends read and write-back requests to DRAM. Only reads get
responses.

```
 core i links ──> MSHR partition i ─┐
                  (6 entries)       ├─ merge i ─┐
 downgrade resp i ──────────────────┘           │
                                                ├─ TDM slot ─> pipeline reg ─> process stage
 core j ... ────────────────────── merge j ─────┘        (tag/dir + data arrays)
                                                              │
            ┌───────────────────────┬─────────────────────────┘
            v                       v
     UQi (per core) ──┐          DQ (shared, 12) ──> DRAM ctrl ──> data into MSHR
     Downgrade-L1 i ──┴─> out mux i ──> core i
```

Every message that touches the arrays goes through one cache-access
pipeline. That covers a new upgrade request, a downgrade response, and
DRAM read data waiting to be installed. The pipeline has one register
stage and then a process stage, which reads the tag, directory and data
arrays and writes the result in the same cycle.

### 2.1 The pipeline never stops

Every outcome of the process stage is one of three things:

* a write into the message's MSHR;
* an entry in UQi, the queue of MSHRs with a grant ready for core *i*;
* an entry in DQ, the queue of MSHRs that must send a DRAM request.

Each UQi is as deep as core *i*'s MSHR partition, and DQ is as deep as all
MSHRs together. An MSHR is in at most one queue at a time, so neither
queue can fill. DRAM read data is stored in the MSHR that asked for it,
so the DRAM response port never pushes back either. With no
back-pressure anywhere, nothing one core does can hold up another core's
message once that message has entered the pipeline. Assertions in `llc`
check that UQi and DQ are never full when written.

### 2.2 MSHR partitions and their size

An upgrade request must claim a free MSHR of its own core's partition
before it can reach the pipeline. A full partition stalls only that core.

The partition size comes from the DRAM controller. It can hold
`d_max = 24` requests. One MSHR can have at most two requests out at
once: a write-back of its victim and a read of its line. With
`d_max/(2N) = 6` MSHRs per core, the LLC can never fill the DRAM
controller, so the controller never pushes back. `mi6_top` derives
`MSHR_PER_CORE` this way, and the testbenches check that the
`dq_stall` event never occurs.

### 2.3 Entry: per-core merge, then a time-division arbiter

For each core, a merge picks one message to offer:

* a downgrade response from that core's L1, which always wins;
* otherwise one of the core's MSHRs that is ready to use the pipeline. It
  may hold a new request, DRAM data to install, a retry or a replay.
  MSHRs that already own a line go first; the rest take turns in
  round-robin order.

`tdm_arbiter` then admits core `T mod N` in cycle `T`. **It does this even
when that core has nothing to send: the slot is wasted.** A
work-conserving arbiter would give the slot to the other core. That would
make each core's entry time depend on whether its neighbour was busy,
which is exactly the leak the design removes. The testbench proves this
directly. The fault copy of `llc` with a work-conserving arbiter passes
every coherence check but fails the timing test in section 6.

This wasted bandwidth is MI6's main LLC cost. Each core sees the pipeline
only one cycle in N.

### 2.4 DQ and the retry bit

A miss whose victim line is dirty needs two DRAM requests, a write-back
and then a read. If one DQ dequeue sent both, that dequeue would take two
cycles. The DQ head would then stall, and a request of another core queued
behind it would wait longer.

To avoid this, the MSHR sets its **retry** bit when it enters DQ for a
dirty replacement. Its dequeue sends only the write-back, in one cycle,
and returns the MSHR to the ready state. The MSHR re-enters the pipeline
in a later slot of its own core. By then its victim way is empty and still
locked to it, so the request misses cleanly and enters DQ a second time as
a plain read. Every DQ dequeue therefore takes exactly one cycle. The
extra trip only spends the core's own pipeline slots.

### 2.5 Downgrades, UQi and the output mux

A request can find its line held by L1s in a conflicting state. A victim
way can also still be held by some L1, because the LLC is inclusive. In
both cases the MSHR records which cores it must downgrade.

There is one `downgrade_l1` per MSHR partition. Each copy looks only at
its own 6 MSHRs and sends one downgrade request per cycle, so partitions
never compete for it.

For each core, an output mux joins UQi with the downgrade requests
addressed to that core. UQi wins. A downgrade request to core *i* made
for core *j* means that *i* and *j* share a line. Sharing a line is only
possible inside one protection domain, such as a multithreaded enclave.
So this contention never crosses domains.

When the L1s have answered (through the pipeline, in their own slots),
the MSHR is ready again and replays its request.

### 2.6 Coherence details this design fills in

* The directory is MSI. Each LLC way keeps one state per core: I, S or M.
  The LLC is inclusive.
* A grant always carries the line.
* A request for a line that another MSHR is already working on is
  **replayed**. It goes back to ready and tries again in its core's next
  slot. The same happens if every way of the set is locked.
* **Victim choice:** the first invalid unlocked way is taken. Otherwise
  the search starts at a per-core LFSR value. Ways locked by, or held for,
  another MSHR are skipped. Each core has its own LFSR, so its victims
  depend only on its own history.
* **Reset** clears the MSHRs at once. A sweep then clears the line valid
  bits one set per cycle, 1024 cycles at full size. No message enters the
  pipeline during the sweep. Upgrade requests simply wait in their MSHRs.

### 2.7 Timing

* A hit that enters the process stage in cycle *t* is in UQi at *t+1*.
* It can be in the core's output FIFO at *t+2* at the earliest.
* A miss adds the DRAM round trip and one more pipeline pass, which
  happens in the core's next slot after the data returns.

## 3. DRAM controller

`dram_ctrl` accepts at most one request per cycle, up to `MAX_REQS = 24`
in flight. It answers every read exactly `LATENCY = 120` cycles after
accepting it, in order, and never answers writes. The backing store is
reached through a simple port (`mem_en`, `mem_we`, `mem_addr`,
`mem_wdata`, `mem_rdata`), read or written in the accepting cycle. With
a fixed latency and no back-pressure, the DRAM channel carries no timing
information between cores.

## 4. Per-core security units

| Module | What it does |
|---|---|
| `region_check` | A 64-bit register, one bit per DRAM region, written only in machine mode. Reset allows nothing. An access whose region bit is clear gets `emit=0` (it must not leave the core) and `fault=1`. The core raises the exception only if the access commits. `bv_changed` pulses after a write, so the core can drop cached permissions. |
| `mfetch_guard` | A base/size pair, written only in machine mode, that bounds instruction fetch while the core is in machine mode. This is where the security monitor lives. A machine-mode fetch outside the range is blocked and faults. Fetch outside machine mode is not restricted here. |
| `nonspec_gate` | No speculation in machine mode. A memory instruction is renamed only when the ROB is empty, and only from the first rename slot. Instructions behind it wait. Outside machine mode renaming is untouched. |
| `purge_ctrl` | The `purge` instruction. All structures are cleared in parallel: L1 I and D, one line per cycle (512 lines, with a ready handshake); both L1 TLBs in one cycle; the L2 TLB one set per cycle (256 sets); the branch predictor 8 entries per cycle (4096 entries). A purge takes 512 cycles when the L1s never refuse. An L1 must report every line it invalidates to the LLC, even a clean one, as a downgrade response on its link. It drops `l1i_ready`/`l1d_ready` when that link is full. |

## 5. Attaching cores: rules the L1 must keep

* Use the three link FIFOs as valid/ready channels. The types are in
  `mi6_pkg`: `upg_req_t`, `dn_resp_t` and `to_l1_t`.
* Keep at most one upgrade request outstanding per line.
* Do not send an upgrade request for a line until the LLC has taken your
  downgrade response for it.
* Answer a downgrade request only if you hold the line above the
  requested state. Otherwise drop it: your earlier downgrade response
  already answered it.
* Put all of a domain's memory in the regions its bitvector allows, and
  run `purge` when a core changes domain.

## 6. Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. The larger ones use:

* `l1_model`: a behavioural L1 with its own random generator. It keeps
  MSI state and checks every grant and every load against golden data.
* `dram_model`: a sparse backing store.
* `tb_mem_pkg`: holds the golden data.

The main tests:

* `tb_llc` runs a small LLC (16 sets, 4 ways). It has two phases:
  * a 20,000-cycle coherence stress from both cores over shared lines;
  * the **timing-independence test**. Core 0 runs a fixed traffic
    pattern twice, once with core 1 idle and once with core 1 busy in
    other regions. The hash of (cycle, line) of every grant core 0
    receives must be identical in the two runs.

  It also checks the slot rule and that the DRAM controller never
  pushes back. A wrong set index (low address bits only) also breaks
  this test, because the busy core then evicts the other core's lines.
* `tb_mi6_top` runs the full-size machine with no parameter changes. It
  plays a context switch:
  1. In machine mode: write the region bitvectors, set and test the
     monitor fetch range, hold memory operations until the ROB empties,
     and purge both cores (512 cycles).
  2. Two domains run in disjoint regions. Each core uses 24 lines per set,
     more than the 16 ways, so recalls, dirty replacements and retries
     happen. Every request and random foreign probes go through the
     region check.
  3. A shared-region phase, as in a multithreaded enclave, produces
     cross-core downgrades.

  4. The timing-independence test again, at full size. After a reset,
     core 0 runs alone in region 0. After another reset, it runs the same
     pattern while core 1 works in regions 1-3. The grant hashes must
     match.

  The test counts every mechanism and fails if any of them never
  happened.

To simulate with Verilator 5, for example the top:

```
verilator --binary --timing --assert --top-module tb_mi6_top \
  -Irtl -Itb -y rtl -y tb rtl/mi6_pkg.sv tb/tb_mem_pkg.sv tb/tb_mi6_top.sv
./obj_dir/Vtb_mi6_top +verilator+rand+reset+2
```

Replace `tb_mi6_top` with any other testbench name. The testbenches avoid
`randomize()` and initialise everything they read, so they run the same
way in a two-state simulator. The full-size top synthesizes with Yosys:
the data, tag and valid arrays (about 8.8 Mbit) are inferred as memories,
plus about 1,150 flip-flops of control.

## 7. Departures from the published design and own choices

* **Cores, L1s, TLBs, branch predictor.** These come from an existing
  out-of-order core and are not built. Their interfaces are ports, and a
  behavioural L1 stands in for them in tests. The purge and rename units
  are built as stand-alone units with the hooks those structures would
  need.
* **Arbiter.** The published text calls the entry arbiter round-robin.
  Here it is strictly time-division, because that is the property the
  argument needs.
* **Left to the designer.** The published design leaves these open:
  * link FIFO depth (2);
  * pipeline depth;
  * message formats;
  * victim choice;
  * the replay rule;
  * merge priority (downgrade response first, owners next);
  * output-mux priority (UQi first);
  * reset values (no region allowed; monitor range 0 to 64 KB);
  * the purge handshake;
  * the exact rename rule in machine mode.

  All of them are choices made here.
* **Region permission caching.** The published design caches region
  permissions in the TLB. Here the check is done on the physical address
  of every access. The result is the same, but it costs a lookup per
  access.
* **Reset sweep.** The valid-bit sweep after reset (section 2.6) is a
  choice made here.
* **Scale.** The 16-core, 16 MB configuration used in the published
  study of partitioning is not the default here. The RTL is
  parameterised for it (`N_CORES`, `LLC_SET_BITS`) but has only been
  simulated at two cores.

## 8. Limits

* Timing independence has been shown by simulation only. It was tested
  with one traffic pattern per core, on the small cache and on the
  full-size one. It has not been proved formally.
* Coherence has been checked against a behavioural L1 that obeys the
  rules in section 5. A real L1 that breaks them can deadlock the LLC or
  corrupt data.
* The security-unit interfaces (trap causes, CSR addresses, how a core
  reacts to `emit`/`fault`) are only sketched by their ports.
