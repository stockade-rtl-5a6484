# Stockade access control: bi-enclaves and pairwise shared EPC in RTL

SGX protects an enclave from everything around it. Stockade adds protection in the other
direction: an enclave can be turned into a **bi-enclave**, a confined compartment that cannot read, write or
run anything outside its own protected memory. It also cannot leave through `EEXIT`. It still
needs to talk to something, so Stockade adds one more mechanism: two enclaves can share
single EPC pages as a private channel that neither the OS nor a third enclave can touch.

All of this is enforced where SGX already enforces enclave isolation: in the check that runs
when a TLB miss is resolved. A translation that passes the check is cached in the TLB. A
translation that fails never gets there. This RTL builds that check and the state it reads,
together with the instructions that change that state:

| Change | What this RTL does |
|---|---|
| SECS: 1-bit bi-enclave flag | `secs_store` keeps it per enclave. `EINIT` sets it. |
| EPCM: 52-bit co-owner field | `epcm` keeps one entry per EPC page, co-owner included. |
| `EINIT` | Marks an enclave as bi-enclave or ordinary (`mode_ctrl`). |
| `EEXIT` | Refused while a bi-enclave runs (`mode_ctrl`). |
| `ESADD` / `ESACCEPT` | Offer and accept a shared page (`share_ctrl`). |
| TLB miss check | Abort page for a bi-enclave's outside accesses. Owner *or* co-owner may map an EPC page (`access_validator`, `tlb_miss_handler`). |

The rest of the system is reached through ports of `stockade_top`:
- the core's pipeline
- the OS page-table walker
- the memory encryption engine
- the unchanged SGX flows that create enclaves and add pages (ECREATE, EADD)

The monitor enclave and the call API that run on top of the channel are software.

## The TLB-miss check

`access_validator` is a purely combinational decision. Its inputs are:
- the walked translation VA → PA
- the EPCM entry of the PA
- the current context: enclave mode, current enclave ID, bi-enclave flag and ELRANGE

An enclave ID (EID) is the physical page number of the enclave's SECS page. It is 52 bits,
the same width as the new EPCM field.

```
executing enclave code?
├─ no:  PA in PRM? ── yes → ABORT PAGE                (the OS cannot read enclaves)
│                  └─ no  → insert
└─ yes: PA in PRM?
        ├─ yes: PA in EPC?                  no  → page fault
        │       EPCM entry valid, not blocked?  no  → page fault
        │       EID == owner, or EID == co-owner     (2) no → page fault
        │       EPCM VA == translated VA?       no  → page fault
        │       → insert
        └─ no:  VA inside ELRANGE?          yes → page fault
                bi-enclave?                  (1) yes → ABORT PAGE
                → insert with XD set        (ordinary enclaves may read/write, not run, outside)
```

- **(1)** is the bi-enclave confinement.
- **(2)** is the co-owner extension. A co-owner counts only after it has accepted the page
  (`coowner_valid`).

Because the check runs only on a TLB miss, everything depends on the TLB holding only
translations that were checked under the *current* context. So the TLB is flushed on:
- every mode change: `EENTER`, `ERESUME`, `EEXIT` and `AEX`
- every change to an EPCM entry by `ESADD` or `ESACCEPT`

The verdict is cached with the translation: a TLB entry can carry an abort-page flag or the
XD bit. A later hit behaves exactly like the miss that filled it. Page faults are never cached.

An abort verdict replaces the walked physical page with the abort page (`ABORT_PPN`, by
default the all-ones page number, above any DRAM). The replacement is made both in the TLB
entry and in `resp_pa`, and `resp_abort` flags it. What an access to the abort page does (in
SGX, reads return all ones and writes are dropped) is left to the memory side.

## Bi-enclaves and control transfer

`EINIT` takes the bi-enclave choice as an operand (`ins_bi`) and stores it in the SECS record.
`EENTER` and `ERESUME` then load three things into the context registers of `mode_ctrl`:
- the enclave ID
- its flag
- its ELRANGE

`EEXIT` from a bi-enclave completes with `ERR_EEXIT_BI`. The enclave keeps running, and no
flush or mode change happens.

`AEX` is left as it is in SGX. Interrupts and faults must still reach the OS, and AEX scrubs
the register state, so it gives confined code no way out. `ERESUME` brings the enclave back.

## Shared pages: ESADD and ESACCEPT

A page moves through these EPCM states:

```
owned by A ──ESADD(page, B) by A──▶ blocked, offered to B ──ESACCEPT(page) by B──▶ shared A+B
             page zeroed (64 lines)     (A and B both fault)   TLB flushed             (both may map it)
```

- **ESADD** is issued by the owner, in enclave mode.
  - Its checks: the page is a valid regular EPC page owned by the caller, not already blocked,
    offered or shared; the target is a valid SECS page.
  - Its effect: the EPCM entry is marked blocked, with B recorded as the pending co-owner. Then
    64 zero-line writes leave on the `zero_*` port, and the TLB is flushed with the EPCM update.
  - It takes 69 cycles when the memory port is always ready.
- **ESACCEPT** is issued by B.
  - Its check: the page is offered to the caller.
  - Its effect: the co-owner is committed, the page is unblocked and the TLB is flushed.
  - It takes 3 cycles.
- A page has one co-owner at most. A second ESADD on it returns `ERR_BUSY`.

A co-owner reaches the page through its own page table, at the VA recorded in the EPCM entry.
That address lies in the owner's ELRANGE. The check of a PRM address looks only at the EPCM,
so ELRANGE does not get in the way.

## Blocks and interfaces

| Module | Function | Timing |
|---|---|---|
| `stockade_pkg` | Widths (4 KiB pages, 36-bit VPN, 52-bit PPN/EID), EPCM and SECS structs, instruction, verdict and error enums | — |
| `access_validator` | The decision tree above | combinational |
| `tlb` | 64 entries, fully associative, round-robin replacement; flush beats fill | lookup combinational, fill/flush on the clock |
| `tlb_miss_handler` | Access port. Hit → answer. Miss → page walk, EPCM read, check, fill | hit: 1 cycle; miss: walk + 3 cycles; walk fault: reported when the walk returns |
| `epcm` | One entry per EPC page; 2 read ports (check, sharing) and 1 write port | read latency 1 |
| `secs_store` | Per enclave: exists, initialised, bi-enclave, ELRANGE; indexed by the SECS page's EPC index | read latency 1 |
| `mode_ctrl` | `EINIT`, `EENTER`, `ERESUME`, `EEXIT`, `AEX` | 3 cycles for SECS readers, 2 for exits |
| `share_ctrl` | `ESADD`, `ESACCEPT` | 69 / 3 cycles |
| `stockade_top` | Wiring and ordering | — |

Ports of `stockade_top`, by group:
- `ins_*`: one enclave instruction at a time (valid/ready in; a one-cycle `ins_done` with
  `ins_err` out). `ESADD`/`ESACCEPT` go to `share_ctrl`, the rest to `mode_ctrl`.
- `acc_*` / `resp_*`: one memory access at a time, with a VA and read/write/execute in, and a
  PA with fault/abort/XD flags out.
- `walk_*`: request a VPN and get back a PPN or a fault.
- `zero_*`: zero-line writes for ESADD (valid/ready).
- `host_*`: EPCM and SECS writes from the unchanged SGX flows. An EPCM write waits
  (`host_epcm_wr_ready`) while `share_ctrl` writes.
- Status outputs: the context registers, `tlb_flush`, and a trace of every check (`chk_valid`,
  `chk_verdict`, `chk_why`, where `why` names the deciding branch).

Ordering rules at the top:
- An instruction is accepted only when no access is in flight.
- An access is accepted only when no instruction is running or being offered, and not in the
  cycle a flush is raised.

So the check never reads an EPCM entry that an instruction is rewriting, and no lookup sees
translations that a flush is about to remove.

## Sizes

| Parameter | Default | Where it comes from |
|---|---|---|
| EID / PPN width | 52 bits | the co-owner field width of the design |
| Page size | 4 KiB | x86 |
| VA width | 48 bits | x86-64 |
| PRM | 32768 pages (128 MiB) at 2 GiB | usual SGX1 value |
| EPC | 23936 pages (93.5 MiB) at the start of PRM | usual SGX1 value |
| TLB | 64 entries | typical L1 DTLB |
| Abort page | all-ones page number | own choice |
| Zeroing granule | 64-byte lines | cache line |

Only the 52-bit width comes from Stockade itself. Every other size here is a conventional value.
All of them are parameters of `stockade_top`.

The EPCM and the SECS store hold 23936 entries each: 146 and 74 bits wide. In silicon, SGX
keeps both in PRM memory behind microcode. Here they are arrays, which a synthesis flow
would map to SRAM.

## What is this design's own, and what is not built

These are choices the published description leaves open:
- Error codes.
- Latencies.
- Handshakes.
- The `share_pending` state between ESADD and ESACCEPT.
- Flushing the TLB at ESADD as well as at ESACCEPT. Otherwise a cached translation would
  survive the block.
- Checking the EPCM valid bit alongside blocked.

Deliberate departures and omissions:
- **EENTER into a bi-enclave is not limited to launch.** The architecture overview suggests
  that control may enter a bi-enclave only when it is launched. The list of hardware changes,
  however, modifies only `EINIT` and `EEXIT`, and this RTL follows that list.
- **No way to destroy a channel.** The design mentions destroying a channel after failed
  attestation but gives no instruction for it, so none is built.
- **One core.** TLB shootdown across cores is reduced to one `tlb_flush` output.
- **Unchanged SGX parts are not built:** ECREATE, EADD and the rest of SGX page management,
  AEX state saving (SSA), and the memory encryption engine. They are reached through the
  ports above.
- **Software is not built:** the monitor enclave (system-call policy, accounting, return-value
  checks) and the marshalling call API.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M` at the end. Build
and run one with plain Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl --top-module tb_stockade_top \
    rtl/stockade_pkg.sv rtl/access_validator.sv rtl/epcm.sv rtl/secs_store.sv rtl/tlb.sv \
    rtl/tlb_miss_handler.sv rtl/mode_ctrl.sv rtl/share_ctrl.sv rtl/stockade_top.sv \
    tb/tb_stockade_top.sv -o sim && ./obj_dir/sim
```

For a unit test, give the package, the unit and the modules it instantiates. For
`tb_tlb_miss_handler` that is `access_validator.sv` and `tlb.sv`.

| Testbench | What it checks |
|---|---|
| `tb_access_validator` | 20000 random contexts/translations against an independent model of the decision tree; every branch reached |
| `tb_epcm`, `tb_secs_store` | Random read/write against a model, with read latency and reset |
| `tb_tlb` | Random fill/lookup/flush against a model of the replacement; capacity |
| `tb_tlb_miss_handler` | 1600 accesses in four contexts (untrusted, enclave, bi-enclave, co-owner); random walk latency; hit/miss prediction and latency |
| `tb_mode_ctrl` | Each instruction's success and error cases, context registers, flush pulses, latencies |
| `tb_share_ctrl` | Every ESADD/ESACCEPT error case, zeroing addresses and order, EPCM state after each step, latencies, a memory port that stalls |
| `tb_stockade_top` | End to end at the default sizes (below) |
| `tb_query_server` | A five-enclave query service at the default sizes (below) |

`tb_stockade_top` takes the whole design through one story:
- It creates two bi-enclaves and one ordinary enclave.
- It shows that untrusted code gets the abort page for enclave memory.
- It runs the first bi-enclave, which is confined (abort page outside, fault on the other
  enclave's page) and has `EEXIT` refused.
- It shares a page from the first bi-enclave to the second: zeroing, faults while the page is
  blocked, acceptance, then access by both enclaves.
- It checks that the ordinary enclave faults on the shared page and gets XD outside.

It counts each mechanism (abort pages, ownership faults, blocked faults, XD fills, TLB hits,
flushes, and a host write stalled behind `ESACCEPT`) and fails if any count stays at zero. It
runs at every default parameter in a few seconds.

`tb_query_server` runs a service built like the multi-module query server that Stockade was
evaluated with:
- a monitor enclave (an ordinary enclave, the only one allowed to touch untrusted memory)
- four bi-enclave modules: an SSL server, SQLite, a protected file system and LibSVM
- seven channels of four shared pages each, set up with ESADD/ESACCEPT: every module to the
  monitor, plus SSL–SQLite, SSL–LibSVM and SQLite–FS

It sends 40 requests (database queries and predictions) hop by hop through the channels. Each
hop switches enclaves with AEX and ERESUME, which is about 300 context switches in all. Each
enclave works on 80 private pages, more than the TLB holds. Random probes of foreign channels
and of outside memory are mixed in. About 14000 checks compare every access with a reference
model of page ownership.

## How far to trust it

Every module has been compiled with Verilator lint and with slang. Every testbench passes.

Each testbench has been shown to fail against a copy of its module with one deliberate bug:
- the co-owner check removed
- the co-owner field not stored
- the bi-enclave flag not set
- the abort flag dropped in the TLB
- faults cached in the TLB
- EEXIT not refused
- ESACCEPT accepted from anyone
- the ESADD flush not connected

The checks come from the published decision flow and the list of hardware changes. Cycle
counts are this design's own, because the published description gives none.

Lint warnings that remain, and why they stand:
- Replication longer than 8192 bits: this is the reset of the 23936-bit valid vectors.
- Two output pins of the validator are left open in the miss handler (`in_prm`, `in_epc`),
  because the verdict already encodes them.
- `rst_n` serves both as the asynchronous reset and in the assertions' `disable iff`.
- Unused package constants.
- EPCM fields that the check does not read, such as `share_pending`.
