# Okapi: speculative loads only inside the trust domain

Spectre-style attacks work because an out-of-order core runs loads that
will never commit. Such a transient load can read any address the attacker
chooses and leave a trace of the value in the cache. Okapi, a published
secure-speculation scheme, puts a simple hardware rule in the way:

> A load that might still be squashed may read a data page only if the
> running software has already read that page legally (non-speculatively,
> without a fault) since the last time the permission was withdrawn.

The set of pages that may be read speculatively is the **trust domain**.
It starts empty and grows as the program touches pages. It is emptied on
every change of privilege level, and whenever software runs the new
**OkapiReset** instruction (for example when a runtime switches from one
isolated component to another). A second new instruction, **OkapiLoad**, reads a page
legally without adding it to the trust domain. Software uses it for
secrets such as keys.

Attackers also steer branch predictors to "gadgets" elsewhere in the code.
Against that, a load is also held back when speculative control flow has
just left the current code page.

This repository holds synthesizable SystemVerilog for all the logic Okapi
adds to a core. The core itself is not included: fetch, rename, issue,
execution units, page walker and caches connect through the ports of
`okapi_top`. A behavioural host model in the testbench drives it end to end.

## 1. Terms used throughout

| Term | Meaning in this RTL |
|---|---|
| safe access bit | One bit per DTLB entry. Set means the page is in the trust domain. |
| window opener | An instruction that can still cause younger instructions to be squashed: a branch or jump, a store, a load, an AMO/SYSTEM instruction, OkapiReset, OkapiLoad, or an unknown opcode. The decoder produces this class bit. |
| visibility point (VP) | The oldest ROB entry that is a window opener and is not yet resolved. Everything older is bound to commit. |
| unsafe | A ROB entry younger than the VP. A load that is unsafe when it reaches the DTLB is a *speculative* load. |
| safe | Not unsafe: the load is bound to commit. |
| suspicious | Set at fetch on the first instruction reached from a different code page. |
| suspicious_load | An entry at or after a suspicious instruction that is still unsafe. Such loads may not even look up the DTLB. |
| fence_blk | An entry younger than an OkapiReset or OkapiLoad that has not executed yet. |

## 2. The life of a load

This is the part that matters most. Each load goes through these steps:

1. **Fetch** (`okapi_page_cross`). For every instruction of the fetch
   bundle, the page of its PC is compared with the page of its predicted
   next PC. If they differ, the *next* instruction gets the suspicious flag.
   This also applies across bundles, through a one-bit carry register, and
   after a front-end redirect (redirect source page vs. target page).
2. **Decode** (`okapi_decode`, one per lane). This gives the class bits:
   load, store, branch, OkapiLoad, OkapiReset, window opener, plus the
   suspicious flag from fetch.
3. **Dispatch** into the ROB tracker (`okapi_rob_tracker`). A load or
   OkapiLoad also gets a load-queue entry (`okapi_lsq`) in the same cycle.
4. **Address** (AGU port). The entry goes from `ADDR_WAIT` to `READY`.
5. **Select.** Each cycle the LSQ takes the oldest `READY` entry. Before it
   may go to the DTLB, two gates apply:
   - `susp_load` set: the entry is parked as `BLK_SUSP`, with no DTLB access;
   - `fence_blk` set: the entry is parked as `BLK_FENCE`.
   Otherwise the DTLB lookup is sent, tagged with the entry's `unsafe` bit
   and whether it is an OkapiLoad.
6. **DTLB** (`okapi_tlb`). Fully associative, looked up in that cycle; the
   result is registered. Outcomes are checked in this order:
   - no matching entry: `MISS`; a page walk starts if none is running;
   - Okapi on, unsafe load, safe bit clear: `BLOCKED` (no physical address
     is given out);
   - not present, not readable, or a user access to a supervisor page:
     `FAULT`;
   - otherwise `HIT`. If the load is safe and not an OkapiLoad, the entry's
     safe bit is set at the end of the lookup cycle: the page joins the
     trust domain.
7. **Outcome in the LSQ**, one cycle after the lookup:
   - `HIT`: data-cache request (`dc_req_*`) with the physical address;
   - `FAULT`: `fault_*` to the core;
   - in both cases the entry is `DONE` and the ROB hears that the load has
     resolved;
   - `BLOCKED`: parked as `BLK_UNSAFE`;
   - `MISS`: parked as `BLK_MISS`.
8. **Wake-up** (`okapi_wakeup`, combinational) returns parked loads to
   `READY`:

| parked state | woken when |
|---|---|
| `BLK_SUSP` | entry became safe, or its suspicious_load bit cleared (this re-issue may still be speculative), or Okapi is off |
| `BLK_FENCE` | entry became safe, or the OkapiReset/OkapiLoad ahead of it executed, or Okapi is off |
| `BLK_UNSAFE` | entry became safe, or Okapi is off |
| `BLK_MISS` | any DTLB refill |

A refused speculative load therefore costs nothing to security. It is
simply retried once it is bound to commit, and as a safe load it then adds
its page to the trust domain. A speculative miss is allowed to walk the
page table. The refilled entry starts with a clear safe bit, so the walk
latency often hides the wait for the load to become safe.

## 3. Computing the visibility point

`okapi_rob_tracker` keeps, for each of the 192 ROB entries:
- valid;
- is-load;
- still-open (window opener, not resolved);
- suspicious;
- pending-fence (OkapiReset/OkapiLoad not executed);
- is-OkapiReset.

Each cycle a combinational scan runs from the head in program order. It
carries three running flags:

- `seen_open`: an older entry is still open. The entry is `unsafe`.
- `seen_susp`: an entry at or before this one is suspicious and unsafe.
  The entry is `susp_load`.
- `seen_fence`: an older Okapi instruction has not executed. The entry is
  `fence_blk`.

The first open entry is reported as the visibility point (`vp_valid`,
`vp_idx`).

Entries leave the open state in three ways:
- the core reports them resolved (`res_*`, up to 8 per cycle);
- the LSQ reports a load or OkapiLoad translated without fault;
- an OkapiReset at the head executes.

Because the flags are recomputed from scratch every cycle, a squash needs
no repair beyond clearing the valid bits of the squashed entries. The
buffer is circular and its size need not be a power of two.

The scan is long: 192 entries deep. A timing-driven implementation would
split it into a prefix tree; the function would stay the same.

## 4. Emptying the trust domain

- **Privilege switch** (`okapi_priv_monitor`): the privilege-level input
  (the CSR value) is registered. Any change produces a one-cycle
  `clear_safe` pulse in the following cycle. The pulse clears every safe
  bit.
- **OkapiReset** (`okapi_reset_ctrl`). The instruction is a window opener
  and a fence, so every younger load waits behind it. When it reaches the
  ROB head (`head_reset_pending`) and the DTLB has no lookup in flight, the
  controller spends one cycle clearing all safe bits. In the next cycle it
  raises `reset_done`. The tracker then resolves the instruction and drops
  its fence, and the core may retire it. So OkapiReset costs two cycles once
  it is at the head. The core must not retire it earlier: the tracker
  asserts this.
- **OkapiLoad** goes through the DTLB like a load, but never sets the safe
  bit. It is also a fence for younger loads until it has translated, so the
  timing of younger loads does not depend on what it read.

If a clear and a set happen in the same cycle, the clear wins.

## 5. Module map

| file | role |
|---|---|
| `rtl/okapi_pkg.sv` | widths, default sizes, `uop_t`, DTLB request/response types, LSQ states, event struct |
| `rtl/okapi_page_cross.sv` | fetch-stage page-crossing detector |
| `rtl/okapi_decode.sv` | class bits and Okapi instruction decoding |
| `rtl/okapi_rob_tracker.sv` | per-ROB-entry Okapi state, visibility point, flags |
| `rtl/okapi_lsq.sv` | load queue with the suspicious/fence gates and parking |
| `rtl/okapi_wakeup.sv` | reschedules parked loads |
| `rtl/okapi_tlb.sv` | 64-entry DTLB with safe access bits and one page walk port |
| `rtl/okapi_priv_monitor.sv` | privilege-change detector |
| `rtl/okapi_reset_ctrl.sv` | OkapiReset execution at the ROB head |
| `rtl/okapi_top.sv` | wires everything together |

### Default parameters

| parameter | default | origin |
|---|---|---|
| ROB entries | 192 | paper's simulated core |
| load queue entries | 32 | paper |
| DTLB entries | 64 | paper |
| fetch/dispatch width | 5 | paper (decode width) |
| commit width | 8 | paper |
| resolve ports | 8 | own choice |
| virtual address | 48 bits | x86-64 as in the paper |
| physical address | 52 bits | own choice |
| page size | 4 KB | paper |

## 6. Using `okapi_top`

All signals are synchronous to `clk`. The reset `rst_n` is asynchronous and
active low.

Ports, in the order a core uses them:

- **Fetch.** Present a bundle on `fetch_valid/pc/npc/inst`, with the valid
  lanes contiguous from lane 0. It is taken in a cycle where `fetch_ready`
  is high. In that same cycle `disp_rob_idx`, `disp_lq_idx` and `disp_uop`
  give each lane's ROB slot, load-queue slot and decoded class.
- **Redirect.** `redirect_*` tells the fetch-crossing logic the source and
  target of a front-end redirect.
- **Resolve.** The core reports a resolved window opener (branch, store,
  other instruction that may trap) on `res_valid/res_idx`. It never does so
  for loads: they resolve inside.
- **Address.** `agu_valid/agu_lq_idx/agu_vaddr` delivers a load's virtual
  address.
- **Load result.** A load completes with `dc_req_*` (physical address, plus
  whether it went out speculatively) or with `fault_*`.
- **Commit.** `commit_cnt` retires up to 8 entries per cycle. The core may
  retire only completed entries, and an OkapiReset only after `reset_done`.
- **Squash.** `squash_valid` with `squash_rob_idx` squashes everything
  younger than that entry; with `squash_all` it squashes everything. Neither
  commit nor fetch may happen in a squash cycle; `fetch_ready` is low then.
- **Page walker.** `ptw_req_valid/vpn/ready` and `refill_*` connect the
  DTLB to the page walker.
- **Control.** `okapi_en = 0` turns the protection off: unsafe loads are
  translated normally, and loads are no longer held for suspicious_load or
  behind an OkapiReset/OkapiLoad. The safe bits are still kept up to date,
  so switching back on is immediately protective. `priv` is the
  privilege-level CSR.
- **Status.** `trust_domain_pages`, `vp_valid/vp_idx`, `rob_count`,
  `lq_count`, `priv_switches`, `resets_executed`, and `ev`. `ev` is one-cycle
  pulses for performance counters: suspicious hold, fence hold, DTLB
  refusal, DTLB miss, speculative hit, safe bit set, privilege clear,
  OkapiReset clear.

### Latencies

| event | timing |
|---|---|
| ready address to DTLB lookup | at least 1 cycle |
| lookup to `dc_req` | 1 cycle |
| page walk | latency of the walker |
| privilege change to cleared trust domain | 1 cycle |
| OkapiReset at the head to `reset_done` | 2 cycles, once the DTLB is idle |

### Instruction encodings

These are this design's own, chosen in RISC-V custom opcode space:

- **OkapiReset**: `0x0000700b`. This is opcode custom-0 with funct3 = 7;
  every other field must be zero.
- **OkapiLoad**: opcode custom-1 (`0101011`), in the load (I-type) format.
  funct3 selects the width as for `LOAD`; funct3 = 7 is illegal.

## 7. Verification

Every block has a self-checking testbench in `tb/`. Each one compares the
block against an independent model and prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_okapi_page_cross` | random bundles, redirects and stalls against a reference model of the crossing rule |
| `tb_okapi_decode` | table of encodings, plus every opcode |
| `tb_okapi_rob_tracker` | random dispatch, resolve, commit and squash on a 24-entry ROB against a queue model of all flags and the VP |
| `tb_okapi_lsq` | directed scenarios: gating, parking, the outcomes of the four DTLB results, squash, commit |
| `tb_okapi_tlb` | random lookups, clears, walks and evictions against a reference DTLB (including safe-bit and fault rules) |
| `tb_okapi_wakeup` | random states and flags against the wake-rule table |
| `tb_okapi_priv_monitor` | random privilege sequences |
| `tb_okapi_reset_ctrl` | sequencing, waiting for the DTLB, flush |
| `tb_okapi_top` | end-to-end test at full default size (see below) |

`tb_ptw_model.sv` is a behavioural page walker with a fixed page table. It
is not part of the design.

### The end-to-end test

`tb_okapi_top` runs the top at its default sizes. Its host model fetches a
scripted RISC-V stream, resolves branches after set delays, squashes
mispredicted paths and commits in order.

It plays seven phases:
1. A Spectre-PHT bounds-check bypass.
2. A Spectre-BTB jump to a gadget on another code page, and a legal
   page-crossing call.
3. OkapiReset, followed by a wrong-path load to a page trusted before the
   reset.
4. OkapiLoad of a secret, followed by a wrong-path load to it.
5. A privilege switch.
6. The phase-1 attack again with Okapi switched off.
7. 40 rounds of random programs, about 6000 committed instructions. They
   mix loads over six pages, stores, slow branches, mispredictions, jumps to
   other code pages, OkapiResets and OkapiLoads. Wrong paths also load from
   the secret page, from a page the program never uses, and from a
   non-present page. The privilege level flips every third round.

Throughout, it checks that:
- every speculative data-cache request targets a page of the trust domain,
  as it tracks that domain itself;
- no wrong-path load reaches the secret page or runs on the gadget page
  while Okapi is on;
- no load ever reaches a non-present page;
- every physical address is right;
- every correct-path instruction commits and no wrong-path instruction
  does;
- the suspicious flag of every fetched instruction is right;
- after each round, the DTLB's count of safe bits equals the tracked
  trust-domain size.

It counts each mechanism and fails if any of them never happens. In the
reference run, the counts were:
- 715 suspicious holds, 468 fence holds;
- 787 DTLB refusals, 1254 speculative hits;
- 20 misses;
- 106 OkapiReset clears, 15 privilege clears;
- 676 squashes;
- 1 unprotected leak, in the Okapi-off phase.

The random phase is what showed that a DTLB response can arrive in the
same cycle as a squash for a load older than the squash point. The load
queue keeps such a response.

### Running a test

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/okapi_pkg.sv tb/tb_okapi_top.sv --top-module tb_okapi_top
./obj_dir/Vtb_okapi_top
```

Replace `tb_okapi_top` with any other testbench name. The whole top-level
run takes a few seconds.

## 8. Where this RTL departs from, or adds to, the paper

- **Which instruction is flagged at a page crossing.** The paper describes
  this two ways: once as the instruction whose next PC is on another page,
  once as the next instruction. This design flags the next one: the first
  instruction on the new page. That is the instruction whose loads must be
  held in the Spectre-BTB scenario.
- **The suspicious instruction itself counts as suspicious_load.** This
  holds back a gadget whose very first instruction is a load.
- **Definition of the visibility point.** The paper calls it the youngest
  instruction that can open a transient window. It also says loads younger
  than it are unsafe, and that loads become safe once they are bound to
  commit. The RTL implements the second reading: the oldest unresolved
  window opener.
- **OkapiLoad as a fence.** OkapiLoad, like OkapiReset, holds younger loads
  until it has executed, following the statement that both instructions
  serialise younger loads.
- **Parking in the load queue.** Blocked loads are parked in the load queue
  and woken by `okapi_wakeup`. In the paper, the issue queue reschedules
  them.
- **Own choices where the paper says nothing:**
  - speculative DTLB misses start a page walk;
  - one walk at a time;
  - round-robin replacement;
  - fault rules: present, readable, user/supervisor;
  - clear wins over set;
  - one DTLB lookup per cycle;
  - 52-bit physical addresses;
  - resolve width 8;
  - registered privilege monitor;
  - the instruction encodings.
- **Hugepages are not supported:** 4 KB pages only. The paper mentions
  hugepages only as background.
- **Not built:**
  - the host core;
  - the page-table walker (modelled only in the testbench);
  - the caches.
  The paper's software changes (Wasmtime, ERIM and Libsodium
  instrumentation) are programs, not hardware.
- **Performance figures from the paper** (SPEC CPU2017 and Wasmtime
  overheads) are not reproduced. They need a full core model.

## 9. Trust and limits

All blocks are tested against independent models. The top-level test
covers every mechanism at the full default size.

Not covered:
- timing closure of the 192-entry combinational scan;
- interaction with a real issue queue;
- multiple outstanding page walks;
- any formal proof.

Assertions in the RTL check the core-side rules: commit only of completed
entries, OkapiReset retired only after executing, no dispatch or commit in
a squash cycle, and a stable page-walk request. Simulate with `--assert`
to enforce them.
