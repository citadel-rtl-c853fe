# Citadel isolation hardware in SystemVerilog

An enclave on a speculative out-of-order processor has to talk to the
outside world. The usual way is shared memory, and that is where Spectre
leaks start. Suppose a mispredicted path inside the enclave reads a secret,
then touches a shared page at an address that depends on it. The untrusted
OS can later see which line was fetched. Isolation schemes that forbid
sharing close that hole, but they break real programs.

Citadel keeps shared memory and closes the hole with a small set of hardware
changes:

- A speculative access to shared memory may not issue until it is certain
  to commit, that is, until it reaches the head of the reorder buffer
  (**Safe mode**).
- Enclave code that has been checked as free of Spectre gadgets may switch
  the core into **Burst mode**. The branch predictors are switched off there,
  so only straight-line (pc+4) speculation is left, and shared accesses may
  be pipelined again.
- Each enclave has its own page table for a private virtual range. Physical
  memory is split into 64 regions, each owned by one protection domain.
- Shared accesses from an enclave skip the L1 data cache.
- The last-level cache is partitioned by set, with a reconfigurable set range
  per region.
- The MSHRs (miss-status holding registers, the LLC's slots for outstanding
  requests) are split statically between the cores, and the cores reach the
  LLC through a round-robin arbiter.
- DRAM latency is padded to a constant.
- A region can be flushed from the LLC by reading a "zero device".
- Software can trigger a flush of the core's private state.

This repository gives synthesizable RTL for those hardware changes. The
processor around them is not included: the out-of-order cores, L1 caches,
branch predictors, page walkers and DRAM controller are the baseline's. They
connect through ports of the top module `citadel_top`, and the testbenches
provide behavioural stand-ins for them.

## Structure

```
                 core 0 (core_mem_slice)                       core 1 (same)
 MSPEC CSR (spec_csr) ──► fetch_pred_gate  (BTB/RAS/BHT enables)
         │
         ▼
 mem_rs ──► safe_mode_check ──► translation ──► l1d_bypass ──► L1-D port (private)
   ▲  re-dispatch  │   ▲            │  tagged_tlb         │
   └───────────────┘   │            │  mem_region_check   └──► LLC port (shared, src=1)
                dual_pt_select      └─► page-walk port (root = enclave or OS table)
 flush_ctrl ──► pipeline / L1-I / L1-D / MSHR flush requests, TLB flush
                                   │
   L1 refills (src=0) + bypass ──► llc_arbiter (per core, 2:1)
                                   ▼
                    mshr_partition (8 of 16 slots per core)
                                   ▼
                    llc_arbiter (round-robin between cores)
                                   ▼
                    llc (1 MB, 16-way, llc_set_index)
                                   ▼
                 zero_device (0x1_8000_0000 window)  |  dram_pad (fixed 120 cycles) ──► DRAM
```

| File | Role |
|---|---|
| `citadel_pkg.sv` | sizes, address map, MSPEC layout, request/response structs |
| `spec_csr.sv` | MSPEC register: Safe/Burst mode and the decoded controls |
| `fetch_pred_gate.sv` | gates BTB, BHT and RAS predictions and their training |
| `mem_rs.sv` | memory reservation station with dispatch / re-dispatch bits |
| `safe_mode_check.sv` | the "private OR non-speculative" check at the head of the memory pipeline |
| `dual_pt_select.sv` | enclave private range (evbase/evmask) and page-table root select |
| `tagged_tlb.sv` | TLB whose entries carry a private/shared tag |
| `mem_region_check.sv` | per-region private and shared permission bitmaps |
| `l1d_bypass.sv` | sends enclave shared accesses straight to the LLC |
| `flush_ctrl.sv` | flush register and its completion tracking |
| `llc_arbiter.sv` | round-robin arbiter |
| `mshr_partition.sv` | static per-core share of the LLC's outstanding requests |
| `llc_set_index.sv` | set-index range table (1216 bits) and index function |
| `llc.sv` | shared last-level cache |
| `zero_device.sv` | memory device that reads as zeros |
| `dram_pad.sv` | constant-latency DRAM front end |
| `core_mem_slice.sv` | one core's Citadel logic wired together |
| `citadel_top.sv` | two slices plus the shared memory system |

## Speculation control: Safe and Burst modes

### The rule

A memory access is *safe* to issue when at least one of these holds:

- it touches the enclave's private memory;
- it is non-speculative, which here means its ROB tag equals the ROB head.

In Safe mode, every other access (a speculative access to shared memory)
is held back. The difficulty is *where* to hold it. Privacy is only known
once the virtual address has been computed. Waiting in the reservation
station would block younger, unrelated accesses.

### How `mem_rs` and `safe_mode_check` do it

The reservation station keeps two bits per entry, `to_dispatch` and
`to_redispatch`. It selects the oldest eligible entry: oldest by ROB tag
relative to the ROB head, with both operands ready.

- An entry is eligible when `to_dispatch` is set.
- It is also eligible when `to_redispatch` is set *and* its ROB tag is the
  ROB head.

Dispatch clears both bits, but the entry is **not** freed yet. The access
enters `safe_mode_check`, a single pipeline stage. That stage adds the
immediate to the base register and asks `dual_pt_select` whether the
address is private. Then one of two things happens:

- **Safe.** The access moves on to translation, and the stage tells the RS
  to dequeue the entry.
- **Unsafe.** The access is dropped (squashed). The stage tells the RS to set
  `to_redispatch`. The entry then sleeps until its instruction is the oldest
  in the ROB, and is dispatched again. At that point it is non-speculative
  and passes the check.

One ROB tag comparison at the check and one per RS entry are all the extra
logic. No load or store has to be tracked after it leaves the RS.

The check as written in `safe_mode_check`:

```
spec_disable           -> safe = at ROB head       (no speculation at all)
enclave mechanism off  -> safe = 1                  (ordinary OS / untrusted code)
private address        -> safe = 1
Burst mode             -> safe = 1                  (shared accesses pipelined)
otherwise              -> safe = at ROB head
```

### MSPEC

MSPEC is a 5-bit CSR at address `0x7C0`, and 0 is Safe mode (the reset
value). Its bits:

| Bit | Name | Effect |
|---|---|---|
| 0 | BURST | BTB, RAS and BHT off, so fetch uses pc+4 only; shared accesses are no longer delayed |
| 1 | NOSPEC | every access waits for the ROB head |
| 2 | NOTRAIN | predictors are not trained |
| 3 | NOPRED | predictors off, without enabling Burst |

Machine mode (the security monitor) always runs with speculation disabled
and ignores BURST.

A write to MSPEC pulses `spec_barrier`. The core squashes and refetches
younger instructions, so no instruction fetched under the old mode survives
the switch.

`fetch_pred_gate` applies the enables at two points:

- the fetch-stage next-PC mux (a BTB hit only redirects when the BTB is on);
- the decode-stage correction: a branch is predicted taken only with the
  BHT, a JAL only with the BTB, and a return only with the RAS.

A mismatch with the fetched path produces a decode redirect.

## Enclave memory

`dual_pt_select` holds four registers:

- `evbase` and `evmask`. An address `va` is private when
  `(va & evmask) == evbase`.
- `eptbr` (enclave page-table root) and `ptbr` (OS page-table root). The one
  matching the address' side is handed to the page walker.

An `evbase` with a bit outside `evmask` makes the range empty. That turns the
mechanism off (`mech_en = 0`), so the OS and untrusted programs run unhindered.

Translation is a small state machine in `core_mem_slice`:

1. Look the address up in `tagged_tlb` under its private/shared tag. The TLB
   has 32 entries and supports 4 KB, 2 MB and 1 GB pages. Private and shared
   translations of the same virtual page never alias.
2. On a miss, raise `walk_valid` with the VPN, the tag and the root, and wait
   for the walker's fill.
3. Check the physical address in `mem_region_check`. DRAM (2 GB from
   `0x8000_0000`) is cut into 64 regions of 32 MB. The enclave holds one
   bitmap of regions it may use as private memory and one of regions it may
   use as shared memory. An address outside DRAM, or in a region the bitmap
   of its side does not grant, raises `fault_valid`. Machine mode is never
   checked.

## Shared accesses and the memory side

**L1 bypass.** `l1d_bypass` sends an enclave's shared accesses straight to
the LLC as line-sized requests:

- a read of the whole line, from which the result bytes are extracted;
- a write with a byte-enable mask.

A shared line therefore never sits in the core's private L1, where a later
speculative hit could reveal it. Private accesses and all non-enclave code
use the normal L1 port.

**Per-core merge, MSHR share, arbitration.** Each core's L1 traffic and
bypass traffic are merged round-robin. `mshr_partition` then counts that
core's requests in flight. A core with 8 of the LLC's 16 slots in use is
stalled, and the other core is never affected. A final round-robin arbiter
alternates between cores, so neither core can change the other's queuing
delay.

**Set-partitioned LLC.** The LLC is 1 MB, 16-way, 64-byte lines, 1024 sets,
write-back. It does not take its set index from the address. The line's
region (physical address bits 30:25) selects a 19-bit entry of the
set-index range table: a 10-bit base and a 9-bit size−1. Then:

```
set = base + (address bits [15:6] mod size)
```

Every region thus lives in its own range of sets, and the security monitor
can resize ranges at run time through the `llc_cfg_*` port. For example, the
enclave could get 256 sets, the monitor 16, and each idle region a single
set.

Because a range can be much smaller than 1024 sets, different lines fold
onto the same set. The tag is therefore the whole line address. The full
table (64 × 19 = 1216 bits) is exported as `llc_sirt`. At reset, region *r*
owns sets 16*r*..16*r*+15.

**Zero device and flushing.** To flush a region's lines from the LLC,
software can read lines of the zero device: a 2 GB window at
`0x1_8000_0000` that aliases DRAM in every index bit. Its reads return zeros
one cycle later, and writes to it are dropped. Evicting a region this way
writes back its dirty lines without touching anyone else's sets.

`flush_ctrl` covers the core-private state: the pipeline, L1-I, L1-D, MSHRs
and the TLB. A write to the flush register asks all five units. The
controller tracks their acknowledgements and reports completion once.

**DRAM padding.** `dram_pad` stamps each read when it is sent and releases
the response exactly 120 cycles later. Up to 24 reads can be outstanding.
How busy DRAM was therefore does not show in the latency. Writes pass
through. If DRAM were ever slower than the padding, `ev_pad_late` reports it.

## Timing summary

| Path | Cycles |
|---|---|
| MSPEC write to effect | next edge; `spec_barrier` in the write cycle |
| RS dispatch → Safe-mode decision | 1 (registered stage, decision combinational) |
| TLB hit → bypass/L1 request | 1 (translation stage) |
| LLC hit | 10 from leaving the input queue (11 from acceptance on an idle cache) |
| Zero-device read | 1 |
| DRAM read (padded) | 120 from issue, independent of DRAM |
| Flush | until the slowest unit acknowledges, plus 1 |

## Parameters

All defaults are the prototype's:

| Parameter | Value |
|---|---|
| cores | 2 |
| ROB | 64 entries |
| memory RS | 16 entries |
| LLC | 1 MB, 16 ways, 10-cycle latency, 16 outstanding requests |
| DRAM | 120-cycle latency, 24 outstanding requests |
| regions | 64 of 32 MB |

The paper gives no numbers for these, and they are this design's choices:

- TLB size (32 entries);
- address map;
- CSR number and MSPEC layout;
- base/size split of a table entry.

## Departures and limits

- **Not included:** the out-of-order core (rename, ROB, load/store queues),
  L1 caches and their coherence, branch predictors, page walker and
  translation cache, DRAM controller and the security-monitor software.
  The top brings their signals out as ports.
- **LLC:** serves its queued requests one at a time. It keeps no coherence
  directory for the L1s. The prototype's LLC overlaps misses. Replacement is
  round-robin per set, as the replacement policy is not specified.
- **Translation and bypass:** each handles one access at a time per core.
- **Range size:** a set range holds at most 512 sets (9-bit size field).
  "Partitioning off" (every region on all 1024 sets) cannot be expressed.
  The closest setting maps every region onto sets 0..511.
- **Table entry layout:** the source describes an entry once as "base and
  bound" and elsewhere as base and size. This design uses base and size.
- **Reservation station signal name:** the source calls the per-entry
  ROB-head match both "dispatch_ready" and "redispatch_ready". Only the
  re-dispatch condition uses it, so it is named `redispatch_ready` here.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one:

- drives random stimulus with `$urandom`;
- compares results with an independent model;
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog.

For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/citadel_pkg.sv tb/tb_llc.sv --top-module tb_llc
./obj_dir/Vtb_llc
```

`tb_citadel_top` is the end-to-end test, at full size. It surrounds the top
with a ROB model, page walkers, L1 models, an L1-refill traffic source and a
random-latency DRAM. It runs an enclave on core 0 through Safe mode, a flush,
Burst mode, another flush and Safe mode again, while core 1 streams refills
and write-backs into a one-set LLC range. It checks:

- the Safe-mode invariant on every shared access;
- the fetch gating;
- the data of every bypassed load and LLC line;
- the page-table root of each walk;
- region faults;
- the exact 120-cycle DRAM latency;
- that every LLC access stays inside its region's sets.

It ends by flushing one 16-way LLC set with 16 zero-device reads.
Writing back all 16 dirty lines takes 100 cycles here; the prototype needed
93.

It counts each mechanism and fails if any never happened. The mechanisms
are: squash, re-dispatch, Burst pipelining, bypass, TLB miss, fault,
operand wake-up, fetch gating, LLC hit/miss/write-back, zero read, MSHR
limit, flush and padding. It runs in a few seconds.
