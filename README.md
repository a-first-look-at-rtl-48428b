# Hypervisor-extension hardware for a multi-core RISC-V SoC

A virtual machine on a RISC-V core with the hypervisor (H) extension runs in two extra
modes: virtual supervisor (VS) and virtual user (VU). The hypervisor runs in HS mode. For
an embedded, statically partitioned system, two things decide how well this works:

- **Memory translation.** Guest accesses are translated twice: the guest's own page tables
  (first stage, Sv39) produce a guest-physical address. The hypervisor's tables (second
  stage, Sv39x4) turn that into a host-physical address. The hardware must walk both and
  cache the result.
- **Interrupts.** In a plain RISC-V system, every guest timer tick and every device
  interrupt traps into the hypervisor, which then injects it into the guest by software.
  That costs latency and jitter. This design removes the hypervisor from that path:
  - the core-local timer block gains per-hart HS and VS timers;
  - the platform interrupt controller gains per-hart guest contexts. Their lines go
    straight to the guest external-interrupt pending bits, so a guest can claim and
    complete its own device interrupts;
  - the controller also lets a hypervisor inject purely virtual interrupts through the
    same claim/complete interface.

This RTL covers those hardware parts for a six-hart SoC:

- the extended timer block (**CLINTv**);
- the extended interrupt controller (**PLICv**);
- per hart, the trap and mode-change part of the H-extension CSR file: where each trap
  goes, what it records, and how mret/sret return;
- per hart, the interrupt-pending and interrupt-selection logic of the H-extension CSR file;
- per hart, the two-stage MMU: an instruction TLB and a data TLB sharing one page-table
  walker.

The core pipeline, caches and on-chip buses are not included. Their connections are ports
of the top module, `rocket_hyp_top`.

## Block overview

```
                    dev_irq_i[31:1]                       rtc_tick_i
                         |                                    |
 plic_req_i  --> +---------------+   clint_req_i -->  +---------------+
                 |     PLICv     |                    |    CLINTv     |
                 +---------------+                    +---------------+
     meip[h]  seip[h]  vseip[h][GEILEN-1:0]     msip mtip stip vstip [h]
        \        |        /                           /
         v       v       v                           v
        +---------------------------------------------------+   per hart h (x6)
        | hyp_irq: mip / hgeip / VGEIN / delegation / prio  |--> irq_o[h], mip_o[h]
        +---------------------------------------------------+
                         | interrupt to take        trap_req_i[h] (exceptions, xRET)
                         v                                |
        +---------------------------------------------------+
        | hyp_trap: priv, V, status, trap CSRs, roots       |--> trap_rsp_o[h], hart_o[h]
        +---------------------------------------------------+
             priv / V / SPVP / SUM / MXR / satp, vsatp, hgatp to hyp_irq and the TLBs
        +---------+   +---------+
        |  ITLB   |   |  DTLB   |   tlbv x2 (guest bit, GPA per entry)
        +----+----+   +----+----+
             +---- ptw_arbiter ---+
                         |
                   +-----------+
                   |   ptwv    |  two-stage walker + PTE cache
                   +-----------+
                         |
                   ptw_mem_req_o[h] / ptw_mem_rsp_i[h]
```

| File | Contents |
|---|---|
| `rtl/hyp_pkg.sv` | Shared types: register bus, privilege, PTE, walker and TLB request/response, per-hart state |
| `rtl/clintv.sv` | CLINTv timers and software interrupts |
| `rtl/plic_gateway.sv`, `rtl/plic_fanin.sv` | PLIC gateway per source; priority selection per context |
| `rtl/plicv.sv` | PLICv: contexts, claim/complete, injection blocks, management interrupts |
| `rtl/hyp_irq.sv` | Interrupt CSRs and the choice of which interrupt a hart takes |
| `rtl/hyp_trap.sv` | Privilege and V bit, trap delegation and entry, mret/sret, status and trap CSRs, translation roots |
| `rtl/tlbv.sv` | Two-stage TLB |
| `rtl/ptw_arbiter.sv` | ITLB/DTLB arbitration to the walker |
| `rtl/ptwv.sv` | Two-stage page-table walker |
| `rtl/rocket_hyp_top.sv` | Everything wired for `NHARTS` harts |

## Timers: CLINTv

A standard CLINT has one free-running `mtime` and a `mtimecmp` per hart, for machine mode
only. Supervisor timers then need an SBI call into firmware, and guest timers also need
a trap into the hypervisor. CLINTv adds per hart:

- `stimecmp`: the HS timer compares against `stime`, which is `mtime` itself;
- `htimedelta`: the guest's time offset; `vstime = mtime + htimedelta`;
- `vstimecmp`: the guest timer compares against `vstime`.

The three comparisons drive `mtip`, `stip` and `vstip`. `stip` and `vstip` go directly to
the hart's STIP and VSTIP pending bits, so HS software and guests program their own timers
with plain stores.

Register map (byte offsets; 64-bit registers are two 32-bit words, low word first):

| Register | Offset |
|---|---|
| msip n | 0x0000 + 4n |
| mtimecmp n | 0x4000 + 8n |
| mtime | 0xBFF8 |
| stimecmp n | 0xC000 + 8n |
| vstime n (read-only) | 0x14000 + 8n |
| stime (read-only) | 0x1BFF8 |
| vstimecmp n | 0x1C000 + 8n |
| htimedelta n | 0x24000 + 8n |

**Firing rule.** An interrupt is raised while the time is *strictly greater* than the
compare value. The RISC-V privileged specification uses greater-or-equal. Strictly greater
is kept here deliberately; changing it is a one-character edit per comparator.

**Other behaviour:**
- Compare registers reset to all ones, so nothing fires out of reset.
- `mtime` advances by one on every cycle where `rtc_tick_i` is high.

## External interrupts: PLICv

### Contexts and direct delivery

Each hart has `2 + GEILEN` interrupt contexts: M, S, then `GEILEN` VS contexts. Context
`c = h*(2+GEILEN) + k` has:
- an enable bit per interrupt ID;
- a threshold;
- a claim/complete register.

All contexts use the standard PLIC register layout. Each VS context drives one bit of the
hart's `hgeip`:
- VS context `g` sets bit `g+1`.
- The hypervisor selects the context of the running virtual hart with `hstatus.VGEIN`.
  That line becomes VSEIP, and the guest takes the interrupt in VS mode without the
  hypervisor running.
- The other lines, masked by `hgeie`, raise SGEI (supervisor guest external interrupt) in
  HS mode. This tells the hypervisor that a guest that is not running has work pending.

The guest's claim and complete go to its own context's page of registers. The hypervisor
maps that page into the guest's second-stage tables, so these accesses do not trap.

A level-triggered source goes through its gateway, which has one request in flight at a
time. The source becomes pending one cycle after its line rises. A context's line is
combinational from the pending bits: in the end-to-end test, the hart sees the interrupt
in the cycle after the device line rises.

### Virtual interrupt injection

Some interrupts have no physical source, for example inter-VM notifications and emulated
devices. A guest that owns its claim/complete interface must also receive those through it.
PLICv adds **injection blocks**. Each block holds `NVIIR` virtual interrupt injection
registers (VIIRs). Each VIIR holds:
- an interrupt ID (0 means empty);
- a priority;
- an `inFlight` bit.

Attachment and delivery:
- A VS context is attached to a block by writing the block number plus one into that
  context's VCIBIR. Zero means no block is attached.
- Several contexts (the virtual harts of one VM, possibly on different physical harts) can
  share one block. This lets a hypervisor on one hart inject into another hart's guest
  with a single store.
- A VIIR with a non-zero ID and `inFlight` clear counts as pending for every context
  attached to its block. It competes with the context's enabled physical interrupts, by
  priority.

Claim and complete on a VS context:
- **Claim** returns the winning ID. If the winner is a VIIR, claim sets that VIIR's
  `inFlight` bit.
- **Complete** first looks for the ID in the VIIRs of the attached block. A match clears
  that VIIR, and the hypervisor can reuse it.
- Otherwise, if the ID is an enabled physical source, the complete goes to its gateway as
  usual.
- Otherwise the write is an error. It is reported through the block's management logic.

### Block management interrupts

Each block has a management interrupt with ID `NDEV + 1 + n`. The interrupt goes through
the PLIC like any device interrupt; the hypervisor normally enables it on its own S context.
The block's IBMSR register enables and reports two events:

| IBMSR bit(s) | Meaning |
|---|---|
| 0 | enable: interrupt when no VIIR of the block is pending |
| 1 | enable: interrupt on a complete of an ID that is in neither the block nor the enabled physical set |
| 8 | status: no VIIR pending (read-only, follows the VIIRs) |
| 9 | status: unknown-ID complete seen (write 1 to clear) |
| 25:16 | the last unknown ID |

VIIR layout: bit 31 `inFlight`, bits 23:16 priority (the low `PRIO_W` bits are used),
bits 9:0 interrupt ID.

The register-field bit positions of VIIR and IBMSR are this design's own choice. The
register offsets are not:

| Register | Offset |
|---|---|
| priority i | 0x0000000 + 4i |
| pending | 0x0001000 |
| enables of context c | 0x0002000 + 0x80c |
| threshold c | 0x0200000 + 0x1000c |
| claim/complete c | 0x0200004 + 0x1000c |
| VCIBIR c | 0x4000000 + 4c (VS contexts only) |
| VIIR j of block n | 0x4010000 + 0x1000n + 4j |
| IBMSR n | 0x4110000 + 4n |

**Priority and threshold rules:**
- Priority 0 never interrupts.
- A context's line rises when its best pending priority is at least its threshold.
- A claim returns the best pending interrupt regardless of the threshold.
- Ties go to the lower ID, and physical sources win over VIIRs.

## Choosing the interrupt a hart takes: hyp_irq

`hyp_irq` is the interrupt part of the CSR file. It builds `mip` from the CLINTv and PLICv
lines, `hvip`, and the software-writable bits. It implements:
- `mie`, `mideleg`, `hideleg`, `hvip`, `hgeie`;
- `hstatus.VGEIN`;
- the `sip/sie`, `hip/hie` and `vsip/vsie` views.

It then decides which interrupt the hart takes, and in which mode:

- **Delegation.** Interrupts not delegated by `mideleg` go to M mode. Those delegated by
  `mideleg` but not by `hideleg` go to HS. Those delegated by both go to VS.
  `mideleg` bits 2, 6, 10 and 12 always read as one: VS interrupts and SGEI are never
  taken in M mode.
- **Enabling:**
  - An interrupt for a more privileged mode than the current one is always enabled.
    HS counts as more privileged than VS and VU.
  - An interrupt for the current mode needs that mode's global enable.
  - An interrupt for a less privileged mode is never taken.
- **Priority** (fixed): MEI, MSI, MTI, SEI, SSI, STI, SGEI, VSEI, VSSI, VSTI.
- **Cause in VS.** A VS interrupt taken in VS mode reports the cause of its supervisor
  equivalent (code minus one), as the guest expects.

Outputs:
- `irq_o`, the cause, and whether the interrupt goes to M or to VS;
- `mip_o`, for WFI wake-up.

## Traps and mode changes: hyp_trap

`hyp_trap` holds the hart's privilege and V bit, and every CSR that a trap reads or
writes. It is the source of the mode and status signals that the interrupt logic and the
TLBs use.

**Where a trap goes.**
- Interrupts: `hyp_irq` has already chosen the target mode.
- Exceptions go to M unless `medeleg` delegates them.
- A delegated exception raised in a guest (V=1) goes on to VS if `hedeleg` also delegates
  it. Otherwise it goes to HS.
- Some causes can never be delegated to VS: ecall from VS, the three guest-page faults,
  and virtual instruction. The hypervisor must see these, so their `hedeleg` bits read as
  zero.

**What a trap records.**
- Every trap writes the target mode's epc, cause and tval.
- Entering M or HS from a guest also records:
  - that the hart came from a guest (`mstatus.MPV` / `hstatus.SPV`);
  - whether tval is a guest virtual address (`GVA`);
  - for a guest-page fault, the guest-physical address shifted right by 2 (`mtval2` /
    `htval`).
- Entering HS from a guest records the guest's privilege in `hstatus.SPVP`. That is the
  field `hlv`/`hsv` use later.
- A trap into VS uses the `vs*` copies and leaves V at 1.

**Timing.**
- The new PC (`trap_rsp_o`) is given in the same cycle.
- Privilege and V change at the next clock edge.
- An interrupt is taken only when the core marks an instruction boundary (`int_en`). Until
  then `irq_o` stays visible.

**Returns.**
- `mret` returns to `MPP` and, if that is below M, to the V saved in `MPV`.
- `sret` from HS returns to `SPP` and to the V saved in `hstatus.SPV`. This is how the
  hypervisor enters a guest.
- `sret` inside a guest uses the `vsstatus` fields, so it never leaves the guest.

**CSR remapping.** While V=1, the supervisor CSR numbers reach the VS copies (`hyp_irq`
does the same for `sip`/`sie`). A guest
kernel therefore runs unmodified against `vsstatus`, `vstvec`, `vsepc`, `vsatp`, and so on.

**Fixed fields.**
- `htinst` and `mtinst` read as zero.
- `hgatp` accepts only Bare and Sv39x4. It has no VMID, and its root is forced to 16 KiB
  alignment.

## Two-stage translation

### TLB (tlbv)

Each entry holds:
- the host-physical page of the complete translation;
- the guest-physical page (GPA) in the middle;
- the first-stage and second-stage permissions;
- the page level;
- a **guest** bit.

The GPA is stored because a later access through a valid cached translation can still
break a second-stage permission, for example a store to a page the hypervisor mapped
read-only. The resulting guest-page fault must report that GPA, for `htval`, without
walking again.

Lookups, permission checks and invalidation:
- A lookup uses the *effective* mode:
  - an `hlv`/`hlvx`/`hsv` access from HS or U mode is translated and checked as VS or VU,
    according to `hstatus.SPVP`;
  - M mode bypasses translation.
- Stage 1 checks V/R/W/X/U, SUM, MXR, A and D, and raises a page fault.
- Stage 2 checks the stored second-stage permissions, including U and HS-level MXR.
  `hlvx` needs only execute permission. Stage 2 raises a guest-page fault.
- Invalidation ignores addresses and VMIDs. `flush_i` with `flush_guest_i` (hfence)
  drops every guest entry; `flush_i` alone (sfence) drops every host entry.
- Walks that end in a fault are stored too, as 4 KiB entries, so the retried access
  reports the fault at once.

The TLB is fully associative, with `ENTRIES` entries and round-robin replacement. Hits
are combinational. On a miss, `miss_o` stays high while a single walk is in flight. The
core retries the access until the walk has refilled the entry.

### Walker (ptwv)

The walker extends a single-stage Sv39 walker so that it switches to a second-stage walk
at every first-stage level.

State machine:

| State | What it does |
|---|---|
| `S_READY` | Idle. Takes a request. |
| `S_SWITCH` | Starts a second-stage (Sv39x4) walk of a guest-physical address: a first-stage table pointer, or the final GPA. |
| `S_REQ` | Issues the PTE read, or serves it from the PTE cache. |
| `S_WAIT1` | Waits for memory. A bus error ends the walk with an access fault. |
| `S_WAIT2` | Passes straight to S_WAIT3 (one cycle). |
| `S_WAIT3` | Decides: descend, switch stages, finish, or fault. |
| `S_FRAG_SUPER` | Combines page numbers when a superpage leaf of one stage meets a smaller page of the other. |

Each second-stage result is merged into the first-stage walk:
- the first-stage table address becomes host-physical;
- the final GPA becomes the host page;
- the reported level is the finer of the two stages.

Sv39x4 covers 41-bit guest-physical addresses with a 16 KiB root table, indexed by the top
11 bits. A GPA above 41 bits gives a guest-page fault.

Faults:
- Stage 1: an invalid PTE, a table pointer at the last level, or a misaligned superpage
  gives a page fault.
- Stage 2: the same errors, plus a leaf without U, or a first-stage table read through a
  second-stage leaf without R, give a guest-page fault with the GPA.

The **PTE cache** holds `PTE_ENTRIES` non-leaf PTEs, tagged by PTE address and guest bit.
Replacement is round-robin.
- It is used for second-stage table entries and for single-stage walks. First-stage entries
  of a two-stage walk are not cached: reusing one would skip the second-stage translation
  of the next table's address.
- hfence flushes its guest entries.
- A cold two-stage walk over 4 KiB pages reads memory 9 times. A second walk that
  shares the tables reads 7 times. Without the cache, both read 15 times.

There is no dedicated second-stage TLB and no L2 TLB.

`ptw_arbiter` gives the walker to the data TLB first, then the instruction TLB, and routes
the response back to the requester.

## Top level

`rocket_hyp_top` has one CLINTv and one PLICv. Per hart it has `hyp_trap`, `hyp_irq`,
an ITLB, a DTLB, the arbiter and a walker. The core is represented by its connections:

| Port | Meaning |
|---|---|
| `trap_req_i[h]` (`trap_req_t`) | Exceptions (cause, PC, tval, GVA, GPA), mret, sret, and the instruction-boundary strobe for interrupts |
| `trap_rsp_o[h]` | New PC on a trap or return |
| `hart_o[h]` (`hart_state_t`) | Privilege, V, SPVP, interrupt enables, SUM/MXR, satp/vsatp/hgatp roots, for the core's decoder |
| `csr_req_i[h]`, `csr_rdata_o[h]` | Writes and reads of the trap, status and interrupt CSRs |
| `irq_o[h]`, `mip_o[h]` | Interrupt to take, and the pending bits |
| `itlb_req_i/resp_o`, `dtlb_req_i/resp_o` | Lookups: VPN, access type, hlv/hlvx flags; results with faults and GPA |
| `flush_i`, `flush_guest_i` | sfence / hfence |
| `ptw_mem_req_o`, `ptw_mem_ready_i`, `ptw_mem_rsp_i` | Page-table reads, normally served by the L1 data cache |
| `clint_req_i/rsp_o`, `plic_req_i/rsp_o` | Register buses, one 32-bit access per cycle, read data one cycle later |
| `dev_irq_i` | Device interrupt lines, IDs 1..31 |

Default parameters:

| Parameter | Value | Origin |
|---|---|---|
| `NHARTS` | 6 | The largest SoC the design was evaluated in |
| `NVIIR` | 4 | The upper end of the 1–4 VIIRs per block expected to be enough |
| `GEILEN` | 4 | Chosen here |
| `NDEV` | 31 | Chosen here |
| `NBLOCKS` | 8 | Chosen here |
| `PRIO_W` | 3 | Chosen here |
| `TLB_ENTRIES` | 32 | Chosen here |
| `PTE_ENTRIES` | 8 | Chosen here |

Architectural limits: `GEILEN` up to 64, `NBLOCKS` up to 240 and `NVIIR` up to 1000 are
allowed by the architecture. The RTL is parameterised for them, with the ID field at
10 bits.

## Simulating

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`. With
Verilator 5, for example:

```
verilator --binary --timing -y rtl rtl/hyp_pkg.sv tb/tb_rocket_hyp_top.sv \
          --top-module tb_rocket_hyp_top -o sim && ./obj_dir/sim
```

Block tests:

| Testbench | What it checks |
|---|---|
| `tb_clintv` | Timer comparisons, vstime offset, register map |
| `tb_plicv` | Contexts, claim/complete, injection, management events |
| `tb_hyp_irq` | Delegation, priority, VGEIN |
| `tb_hyp_trap` | Trap routing and the values each trap records, mret/sret, guest CSR remapping |
| `tb_tlbv` | Lookups and permissions, with a behavioural walker |
| `tb_ptwv` | Walks, with a behavioural memory holding hand-built page tables |

`tb_rocket_hyp_top` runs the whole design at its default parameters. Harts change mode
through CSR writes, `mret` and exceptions, as firmware and a hypervisor would. It counts
each mechanism and fails if one never happens:
- direct injection into a guest, checking that the line-to-hart latency is at most 2 cycles;
- a guest claim/complete;
- SGEI for a guest that is not running;
- a VIIR injection;
- a block management interrupt;
- the HS, VS and M timers;
- a two-stage walk;
- a PTE-cache hit;
- a guest-page fault on a cached translation;
- an `hlv` from HS;
- an hfence;
- an interrupt taken into VS at `vstvec`;
- a guest-page fault trapping to M with the GPA in `mtval2`.

## Size

At the default parameters, synthesis gives these flip-flop counts:

| Block | Flip-flop bits |
|---|---|
| CLINTv | about 1,640 |
| PLICv | about 2,390 |

The CLINTv figure is close to the register count reported for the six-hart FPGA prototype
of this timer block: about 1,700. The PLICv figure is larger than the prototype's, about
830. The source count, block count and VIIR count of the prototype are unknown. Here they
are 31 device sources, 8 blocks of 4 VIIRs, and 4 guest contexts per hart.

Most of the MMU's flip-flops are in the TLB entries, which store a guest-physical page
number besides the host one.

## Departures and limits

- **Timer comparison.** Uses strictly greater-than, not the specification's
  greater-or-equal.
- **htimedelta.** Implemented as a memory-mapped CLINTv register, not as a CSR. A guest's
  `time` CSR reads therefore still need firmware emulation.
- **Walker transitions.** The state names follow the original walker. The exact transition
  conditions are reconstructed from the two-stage translation rules. The original also
  checks an optional L2 TLB between states; that path is absent here.
- **PLICv encodings.** The VIIR and IBMSR field positions, the management-interrupt IDs and
  the context numbering are this design's own.
- **No VMID tagging.** hfence ignores its address and VMID arguments, so the hypervisor
  invalidates all guest translations on a VM switch.
- **Outside this RTL.** The instruction side of the H-extension lives in the core:
  - decoding of `hlv`/`hsv`/hfence;
  - CSR access-permission checks;
  - virtual-instruction exceptions (from `VTSR`/`VTW`/`VTVM`);
  - counters and floating-point state.
- **Performance figures.** The reported interrupt latencies (tens to thousands of
  nanoseconds) and the benchmark overheads depend on the core and the caches. This RTL
  cannot reproduce them. It only shows that the hardware path from a device line to the
  guest's pending bit takes one cycle.
