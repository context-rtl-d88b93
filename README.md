# ConTExT taint unit — RTL

Transient-execution attacks (Spectre, Meltdown and their relatives) work because a
mispredicted or faulting instruction stream can read a secret and feed it to
later instructions that leave a trace in the microarchitecture before the
misprediction is noticed. ConTExT ("considerate transient execution", Schwarz et
al., CCS 2019) attacks the middle step: **a secret may enter a register, but a
transiently executed instruction may not use it.** Software marks the pages
that hold secrets as *non-transient* (NT); the hardware tracks which registers
hold values derived from such pages and, while an instruction is still
transient, hands it a dummy value instead of the secret.

This repository holds synthesizable SystemVerilog for the hardware part of
that scheme, as a self-contained *taint unit* that sits beside the issue and
commit stages of an out-of-order core. The core itself, its page walker and
the data arrays of its caches are not included; they attach through ports.

## 1. Where the secret-ness is stored

| State | Size | Module |
|---|---|---|
| NT flag in every page-table entry | 1 bit, PTE bit 58 (an OS-ignored bit), honoured only when a control-register enable is set | `pte_nt_decode` |
| NT flag in every TLB entry | 1 bit per entry, copied from the walk | `nt_tlb` |
| Taint bit per architectural register | 56 bits: 16 general purpose, 8 x87/FP, 32 vector | `taint_regfile` |
| Taint bit per 64-bit word of each last-level cache line | 8 bits per 64-byte line | `taint_cache` |
| `IA32_TAINT`, `IA32_SHADOW_TAINT` MSRs | 64 bits each (bits 0..55 used) | `taint_msr` |

The register order inside the 56-bit vector (and the MSR) is GPR 0..15
(x86 encoding: rax=0, rcx=1, rdx=2, rbx=3, rsp=4, …), FP 16..23, vector 24..55.

### Page-table entry

Bit positions follow the x86-64 4 KiB PTE: P=0, RW=1, US=2, WT=3, UC=4,
ignored 9..11, physical page number 12..45 (46-bit physical addresses),
reserved 46..51, ignored 52..58, protection key 59..62, XD=63. The NT flag is
placed in ignored bit 58 (`PTE_NT_BIT` in `contxt_pkg`). Because an ignored bit
may already be used by an operating system, the flag only means anything while
`cr_nt_enable` is set; with the enable clear every page is reported as
transient and the unit behaves like an unmodified core.

A translation is non-transient if **any** level of its walk carries the flag,
or the nested (EPT) walk reports it — the same way the no-execute bit combines.

Two other encodings can be chosen with the `NT_MODE` parameter:

* `NT_MODE_RESERVED` uses the last reserved bit, 51. Legacy software must
  keep reserved bits zero, so this encoding needs no enable. It costs one
  bit of the maximum physical address width.
* `NT_MODE_PAT` leaves every PTE bit's meaning alone. Bits 7 (PAT), 4 (UC)
  and 3 (WT) of the leaf select one of the eight entries of `IA32_PAT`
  (input `pat`). The page is NT when that entry holds the new memory type 2,
  which is the reserved value between WC (1) and WT (4).

With either of these encodings, `cr_nt_enable` only switches the operand
gating, and the core ties it high.

## 2. The taint rules

Each micro-op has at most one register destination and up to three register
sources (`uop_t` in `contxt_pkg`). Its `kind` selects the rule:

| kind | effect on the destination's taint |
|---|---|
| `OP_ALU` | OR of the taints of the register sources (a partial-register read taints the whole destination) |
| `OP_LOAD` | taint of the memory word read, OR the taints of the register sources (address registers included) |
| `OP_IMM` | cleared — the register is wholly overwritten by an immediate or a zeroing idiom (`xor rax,rax`) |
| `OP_REP_ALU` | `rep`-prefixed arithmetic/logic: keeps its old taint, and also takes tainted sources |
| `OP_STORE` | no register written; storing a register to a **normal** page clears that register's taint |
| `OP_NONE` | nothing |

Only a write that replaces the *whole* register can untaint it. A
partial-register write (`mov al, 5` into a tainted `rax`) leaves secret bits in
place, so the core must present it as a merge that also lists the destination
as a source, which is how register-renaming cores already handle partial
writes.

The store rule is deliberate: writing a value to unprotected memory declares it
public (a ciphertext, say), so there is no reason to keep guarding the register.
The `rep` rule exists so that an interrupt handler can set up registers for
`rdmsr` without destroying taint it has not yet saved (section 5).

Taint tracking is always on. It cannot taint anything while no page is NT, so
it is harmless on an operating system that does not use the feature.

## 3. Memory taint and the cache bits

The NT flag of a page is coarse: the stack has to be non-transient, because a
compiler spills registers there, but then every value reloaded from the stack
would come back tainted and taint would spread over time. The cache fixes this
with one taint bit per 64-bit word:

* when a line is allocated, all eight bits take the NT flag of its page;
* a store to an NT page writes the stored register's taint into its word's bit
  (spilling an untainted register leaves an untainted word); a store to a
  normal page clears the bit. The write happens when the store commits, as it
  leaves the store buffer, with the register's architectural taint. A store
  that is squashed therefore changes nothing. A store that was issued
  transiently but turns out to be on the right path is recorded like any
  other;
* a load takes the word's bit if the line is present, and the page's NT flag
  otherwise.

Losing a line therefore only loses the information that a word was *not*
secret: after an eviction a spilled public value reloads as tainted, never the
reverse. `taint_cache` keeps tags, valid bits, true-LRU ages and these taint
bits for an 8-way cache; the data arrays are the unchanged cache's and are not
modelled. After reset the arrays are cleared one set per cycle (`ready` is low
for `SETS` cycles).

## 4. Transient execution: speculative and architectural taint

This is the part that needs the most care. Consider the bounds-check bypass:

```
cmp  rdi, len
jbe  .else              ; mispredicted: the next four run transiently
mov  (rax+rdi), al      ; reads the secret page
shl  12, rax
and  0xff000, eax
mov  (rdx+rax), al      ; the access that would leak through the cache
```

The secret load reads an NT page while transient. Its memory operand is
replaced by the dummy value (0) and its destination `rax` becomes tainted. The
next three instructions have a tainted register source: their tainted operands
also read as 0 and `out_suppress` tells the core not to execute them until they
stop being transient (or are squashed). The probe access never reaches memory
with a secret-dependent address.

For the shl to know that `rax` is tainted, the load's taint must be visible
before the load commits. `taint_regfile` therefore keeps two copies:

* the **speculative** copy is updated when a micro-op is accepted on the issue
  port and is the one the gate reads;
* the **architectural** copy is updated when the core presents the same
  micro-op (with the memory taint the unit reported at issue) on the commit
  port;
* `squash` copies the architectural copy, including a commit of the same cycle,
  back into the speculative one.

Micro-ops must be issued in program order for the speculative copy to be
right; the core already knows which of them are transient (`uop.transient`:
issued under an unresolved branch or a pending fault) and passes that in.

The gate acts only while `cr_nt_enable` is set and the micro-op is transient.
An architectural (non-transient) micro-op always gets the real value — the
scheme does not stop software from using its secrets, only speculation from
using them.

## 5. Interrupts and the taint MSRs

The operating system must save and restore register taint across context
switches. `IA32_TAINT` reads and writes all 56 taint bits at once. But an
interrupt handler needs registers to execute `rdmsr`, and overwriting them
would change the taint before it is saved. Hence:

* on every interrupt (`intr_take`) the architectural taint is copied into
  `IA32_SHADOW_TAINT`;
* `iret` copies `IA32_SHADOW_TAINT` back into both register-taint copies;
* a write to `IA32_TAINT` writes the taint bits **and** the shadow, so the
  restore sequence `wrmsr IA32_TAINT ; ... ; iret` ends with the written value.

A handler saves the shadow like any other register. A nested interrupt that
arrives before the shadow was saved overwrites it; this is safe as long as the
first handler untaints nothing in that window, which the `rep` rule lets it do.
The MSR indices are `0xC90` (`IA32_TAINT`) and `0xC91` (`IA32_SHADOW_TAINT`),
chosen from unused space. MSR accesses, interrupts and `iret` must not coincide
with an issue (an assertion checks this).

## 6. The unit's interface (`contxt_top`)

* **Issue** — `iss_valid`/`iss_ready`, `iss_uop`, the operand values
  `iss_src_data[3]` and, for loads, `iss_mem_data`. In the cycle of acceptance
  the unit returns the gated operands (`out_src_data`, `out_mem_data`),
  `out_suppress`, which operands were masked, the memory taint
  (`out_mem_taint`, to be kept with the micro-op until commit), the taint its
  destination receives and the physical address. `iss_ready` is low while a
  memory micro-op waits for a translation, during the post-reset clear, and
  for a load in a cycle in which a store commits (the cache taint arrays have
  a single port and the committing store has priority).
* **Commit / squash** — `cmt_valid`, `cmt_uop`, `cmt_mem_taint` and
  `cmt_paddr` (the memory taint and physical address returned at issue, which
  the core keeps with the micro-op, for a store in its store-buffer entry);
  `squash`.
* **Page walker** — `walk_req`, `walk_vpn` out; `walk_resp_valid`, the
  4 entries of the walk (index 0 = leaf), which levels were used, and the EPT
  NT flag in. A TLB miss costs the walker's latency plus one cycle for the fill.
  A walk ending in a non-present entry raises `page_fault` and fills nothing.
* **Maintenance** — single-page TLB invalidate (what the OS does after marking
  a mapping NT), TLB flush, cache-line invalidate (what the OS does after
  loading NT data through another mapping).
* **Configuration** — `cr_nt_enable`, and `pat` (the core's `IA32_PAT`,
  read only by the PAT encoding).
* **MSRs** — `msr_wr`, `msr_addr`, `msr_wdata`, combinational `msr_rdata`,
  `msr_hit`; `intr_take`, `iret`.

Everything is one clock domain with an active-low asynchronous reset. TLB and
cache lookups are combinational in the issue cycle; all state changes at the
next rising edge.

## 7. Sizes

| Parameter | Default | Origin |
|---|---|---|
| registers tracked | 56 | fixed by the scheme (16+8+32) |
| taint bits per line | 8 (one per 64-bit word of a 64-byte line) | fixed by the scheme |
| cache ways `LLC_WAYS` | 8 | fixed by the scheme's reference cache model |
| cache sets `LLC_SETS` | 1024 (512 KiB) | chosen; no capacity is specified |
| TLB entries `TLB_ENTRIES` | 64, fully associative, round robin | chosen |
| dummy value | 0 | as proposed |
| NT flag | PTE bit 58 | chosen among the ignored bits |
| NT flag, reserved-bit encoding | PTE bit 51 | as proposed (last reserved bit) |
| NT memory type, PAT encoding | 2 | as proposed |

## 8. Choices made here, and departures

* The scheme offers three ways to mark a page NT: a reserved PTE bit, an
  ignored PTE bit plus a control-register enable, or a new memory type in the
  page-attribute table. All three are built into `pte_nt_decode`, selected by
  the `NT_MODE` parameter (also a parameter of `contxt_top`). The default is
  the ignored bit, the encoding the scheme recommends. The reserved-bit flag
  is ORed over the walk levels like the ignored one. The PAT encoding needs
  the leaf in 4 KiB format: a walker ending on a large page must move that
  entry's PAT bit (bit 12) to bit 7.
* Two reactions to a tainted operand are described: use a dummy value, and do
  not execute dependent operations. Both are provided: every tainted operand
  reads as the dummy value, and a tainted *register* source also raises
  `out_suppress`. A load from an NT page is not suppressed by itself; it
  completes with the dummy value and taints its destination.
* The speculative/architectural split of the register taint, the issue/commit
  protocol, one destination per micro-op, and writing a store's cache taint
  when it commits are this design's own.
* `rep`-prefixed operations are defined as "never lose taint" (old OR sources)
  rather than "keep exactly the old taint", which would let a rep-prefixed
  operation launder a tainted source.
* Registers used for control flow (instruction pointer, flags) carry no taint,
  as in the original scheme.
* The cache block carries only tags, LRU and taint bits, not data.

* Turning `cr_nt_enable` off does not rewrite TLB entries or cache taint bits
  filled while it was on; the operating system is expected to flush the TLB
  when it changes the enable, as for other paging-control bits. While the
  enable is off the gate never acts, so stale bits only affect the taint
  values reported, not the operands delivered.

## 9. Behaviour on the measured workloads

The proposal was evaluated in software (compiler, kernel and an instrumented
emulator), so its workloads are not programs this unit can run. Two of its
measurements do translate into hardware terms and have testbenches:

* **Non-transient stack.** With local variables moved to a separate
  unprotected stack, the GNU core utilities used on average 4.7 KB of
  non-transient stack (3528 bytes for most of them), against 8.2 KB with a
  single stack. `tb_workload_stack` spills one register per 8-byte slot over
  stacks of 3528, 4813 and 8397 bytes (56, 76 and 132 cache lines, 1–3 pages),
  half of them tainted, and reloads every slot transiently. All lines stay in
  the 8192-line cache, so every reload carries exactly the taint spilled with
  it: no public value is over-tainted although the whole stack is
  non-transient, and the reloads issue one per cycle.
* **Context switches.** `tb_workload_ctxswitch` runs 300 switches among four
  tasks through the save/restore sequence of section 5; every resumed task gets
  back exactly its own register taint. The hardware capture and restore each
  take one clock edge; the extra cycles a system call costs come from the
  software sequence around them.
* **Security argument.** The case analysis for secrets is covered at the
  default sizes by `tb_contxt_top` (directed) and `tb_contxt_random` (random
  streams). The cases:
  * a secret only in NT memory, which a transient read gets as the dummy value;
  * a secret copied between registers, spilled to the NT stack, overwritten
    by an immediate, or kept by a `rep`-prefixed operation;
  * a secret deliberately written to normal memory, which untaints it;
  * a secret held across an interrupt.

  The flags register and the instruction pointer carry no taint, as in the
  proposal.

## 10. Files

`rtl/`: `contxt_pkg.sv` (types and constants), `pte_nt_decode.sv`,
`nt_tlb.sv`, `taint_cache.sv`, `taint_regfile.sv`, `taint_msr.sv`,
`nt_operand_gate.sv`, `contxt_top.sv`.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`). Each compares
the block with a reference model written separately (random stimulus plus
directed cases) and prints `TB_RESULT checks=N failures=M`. `tb_contxt_top`
runs the top at its default sizes through the bounds-check example above,
register spills and reloads, cache eviction, an interrupt with the MSR
save/restore sequence, the feature switched off, a page fault and a TLB
invalidation, and fails if any of these never happened. `tb_contxt_random`
drives the top, also at its default sizes, with 3000 random steps. Each step
is either an architectural micro-op or a burst of transient ones that is
later squashed or committed. It compares every issue and both register-taint
copies against a reference of the whole unit (about 390 000 checks).
Alongside it runs a second copy of the unit built with the PAT encoding. The
walker marks the same pages NT through a PAT entry. Both copies must produce
identical outputs in every cycle.
`tb_workload_stack` and `tb_workload_ctxswitch` (section 9) use
`walker_model.sv`, a behavioural page walker. `tb_contxt_random` uses it too.

## 11. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl \
    rtl/contxt_pkg.sv rtl/contxt_top.sv tb/tb_contxt_top.sv \
    --top-module tb_contxt_top -o sim
./obj_dir/sim
```

Replace `contxt_top`/`tb_contxt_top` by any other module and its testbench.
The block testbenches shrink the TLB (8 entries) and cache (4 sets) to force
replacement; the top-level testbench uses the defaults and runs in well under
a second.
