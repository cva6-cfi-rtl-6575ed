# Control-flow integrity for a CVA6-class RISC-V core

Code-reuse attacks such as return-oriented programming work by overwriting a
code pointer: a return address on the stack or a function pointer. The
program then jumps somewhere its author never intended. The RISC-V
control-flow-integrity (CFI) extensions close both doors:

* **Backward edges (returns): Zicfiss, the shadow stack.** A function saves
  its return address twice: on the ordinary stack and, with `sspush`, on a
  second stack in pages that ordinary stores cannot write. Before returning
  it runs `sspopchk`, which reads the saved copy back and compares it with
  the link register. If they differ, the return address was tampered with,
  and the core raises a software-check exception.
* **Forward edges (indirect calls and jumps): Zicfilp, landing pads.** Every
  legitimate target of an indirect jump starts with an `lpad` instruction
  carrying a 20-bit label. The caller loads the expected label into `x7`.
  After an indirect jump, the next instruction to retire must be an `lpad`
  whose label matches `x7[31:12]`, or has label 0. Anything else raises a
  software-check exception.

This repository holds the logic that adds both extensions to CVA6, a 64-bit,
six-stage, in-order application-class core with two commit ports. It
contains only the CFI additions and the places where they attach to the
pipeline. The core itself is not included: fetch, issue, scoreboard,
functional units, load-store unit, TLBs and caches. Every signal the CFI logic
exchanges with the core is a port of the top module, `cva6_cfi`.

The design follows a published microarchitecture for this integration,
"CVA6-CFI". It reports about 1% extra core area (caches excluded) and no loss
of clock frequency in a 22 nm process. The source does not specify
everything: encodings, CSR bit positions, exception codes and several
handshakes. Those details are filled in from the ratified RISC-V CFI
specification or chosen here. The section "Where this departs from the
reference design" lists them.

## Where the logic sits

| Stage | Module | Job |
|---|---|---|
| front end | `cfi_enable` | turns the enable fields into "shadow stack on" / "landing pads on" for the current privilege mode |
| decode | `cfi_compressed_decoder` | expands `c.sspush x1` and `c.sspopchk x5` to their 32-bit forms |
| decode | `cfi_decoder` | turns CFI instructions into tagged operations, or into no-ops when the extension is off |
| execute | `ssu` (shadow stack unit) | filters shadow-stack operations before the LSU and checks `sspopchk` results |
| MMU | `ss_page_check` | enforces "shadow-stack operations only on shadow-stack pages, and the reverse" |
| commit | `lpu_chain` of `lpu` (landing pad unit) | one unit per commit port; tracks the label and the expected-landing-pad state |
| CSR file | `cfi_csr` | `ssp`, enable fields, the ELP bit and its save/restore across traps |

`cfi_pkg` holds the types and constants these modules share. That includes
reduced versions of the core's records: the operand bundle the execute stage
sees (`fu_data_t`), the scoreboard entry the commit stage sees
(`scoreboard_entry_t`) and the exception record (`exception_t`).

## Shadow-stack instructions in the pipeline

The decoder does not add a new kind of operation for the shadow stack. It
reuses the memory path, and an operation tag marks each instruction as a
shadow-stack access:

| Instruction | Becomes | Address | Data |
|---|---|---|---|
| `sspush x1/x5` | store, `OP_SSPUSH` | `ssp - 8` | `x1`/`x5` |
| `sspopchk x1/x5` | load, `OP_SSPCHK` | `ssp` | `x1`/`x5` is carried as operand b for the comparison |
| `ssamoswap.w/d` | AMO, `OP_SSAMOSWAP_W/D` | `rs1` | `rs2` |
| `ssrdp rd` | CSR read of `ssp` | | |

`sspush`, `sspopchk` and `ssrdp` live in the "may-be-operation" encoding
space. With the shadow stack off in the current mode, the first two are
no-ops, and `ssrdp` writes zero. Below M-mode, `ssamoswap` is then illegal.

### The shadow stack unit (`ssu`)

The SSU sits between issue and the LSU. It does two things.

**Filtering.** Before an operation may enter the LSU, the SSU stops it with a
*store access fault* in two cases:

* it is an `ssamoswap` and the hart is in M-mode;
* it is any shadow-stack operation, the hart is below M-mode, and address
  translation is off. That means `satp.MODE` is BARE, or `vsatp.MODE` when
  virtualised.

A stopped operation never reaches the LSU. The fault goes back to the
scoreboard on the store write-back port, tagged with the operation's
transaction ID. That happens in the issue cycle, unless the LSU returns a
store result in that same cycle. The fault then waits in a one-entry
register, and `lsu_ready_o` stays low until the fault has been sent.

**Pop check.** An `sspopchk` that passes the filter is sent to the LSU as a
load. In the same cycle, the SSU stores the link-register value and the
load's transaction ID, and sets an "in flight" flag. From then on, it
compares the transaction ID of every load result from the LSU with the
stored ID. On a match it compares the loaded value with the stored link
register. If they differ, the load's write-back exception becomes a
software-check exception (cause 18, tval 3, "shadow stack fault"). If the
LSU itself reported an exception for that load, such as a page fault, that
exception is kept. Only one pop check can be in flight: a second `sspopchk`
is held at issue until the first has returned.

### Keeping `ssp` consistent

`ssp` lives in the CSR file and moves by 8 bytes when an `sspush` (down) or
`sspopchk` (up) retires without an exception. One or two can retire per
cycle. The pipeline reads `ssp` at issue to form the address. An older push
or pop that has issued but not yet retired would make that value stale. For
that reason `cva6_cfi` counts the push/pop operations that have issued but
not retired. While the count is non-zero, `ss_issue_stall_o` tells the issue
stage to hold a new push or pop. A flush clears the count. This interlock is
this design's own choice; the reference design does not say how it keeps the
pointer current.

### Page types (`ss_page_check`)

A shadow-stack page is a leaf PTE with R=0, W=1, X=0, a combination that was
reserved before Zicfiss. When translation is on, a shadow-stack operation
must hit such a page. Any other data access must hit an ordinary page.
Either violation is a store access fault, with the virtual address as tval.
This follows the reference design. The ratified specification is more
lenient and lets ordinary loads read shadow-stack pages.

## Landing pads at commit

Landing pads are checked at commit, not in decode or execute. At that point
an instruction is known to be non-speculative and in program order, so
nothing needs to be undone on a misprediction. The cost is that the check
has to handle two instructions retiring in the same cycle.

### One landing pad unit (`lpu`)

Each LPU looks at the instruction on one commit port and keeps three pieces
of state moving:

* **label** (`lpl`): a retiring instruction that writes `x7` sets the label
  to bits 31:12 of the written value;
* **expected landing pad** (`elp`): a retiring `jalr` whose `rs1` is not
  `x1`, `x5` or `x7` sets `elp` when landing pads are enabled. Jumps through
  `x1`/`x5` are returns, which the shadow stack covers. Jumps through `x7`
  are software-guarded jumps, which need no landing pad. Any other retiring
  instruction clears `elp`;
* **the check**: while `elp` is set, the retiring instruction must be an
  `lpad` at a 4-byte-aligned `pc`, with label 0 or equal to the current
  label. If it is, it retires with no other effect. If not, the LPU attaches a
  software-check exception (cause 18, tval 2, "landing pad fault") to the
  commit record. That instruction then traps instead of retiring, and
  neither `elp` nor the label changes.

An instruction that arrives with an exception already attached is left
alone.

### The chain (`lpu_chain`)

With two commit ports, the LPUs are chained in program order. Port 1's unit
takes its inputs from port 0's outputs, not from the stored state. This
handles an indirect jump on port 0 and its landing pad on port 1 in the same
cycle, and an `x7` write on port 0 followed by a jump or lpad on port 1. A
third signal, `sbe`, runs down the chain. Once a port has an exception, the
units after it leave all state alone, because the commit stage will not
retire those instructions.

Between cycles, the chain keeps the label in its own register. `elp` is
architectural state and lives in the CSR file. It enters the chain as
`elp_i`, and the last port's value goes back to the CSR file as `elp_o`.
The chain is combinational from the commit records to its outputs. That adds
delay to the commit stage. The reference design accepts this delay, and
reports no loss of frequency.

### ELP across traps

A trap must not lose the "expected landing pad" state, or an attacker could
use an interrupt to skip the check. On a trap, `cfi_csr` saves ELP in the PELP
field of the status register of the mode that takes the trap:
`mstatus.MPELP` (bit 41), `mstatus/sstatus.SPELP` (bit 23) or
`vsstatus.SPELP`. It then clears ELP. `mret`/`sret` put the saved value back
if landing pads are enabled in the mode returned to (`ret_lpe_i`), and clear
the saved copy. The handler's return target is then checked like any other
landing site. A resumable NMI saves ELP in `mnstatus.MNPELP` (bit 9), and
`mnret` restores it. Entry into debug mode saves it in `dcsr.pelp` (bit 28),
and `dret` restores it. If several of these events fall in one cycle, debug
entry wins, then the NMI, then the trap, then the returns.

## CSR state and enables

| CSR | Field(s) kept here |
|---|---|
| `ssp` (0x011) | shadow stack pointer, 64 bits |
| `menvcfg` (0x30A), `henvcfg` (0x60A), `senvcfg` (0x10A) | SSE (bit 3), LPE (bit 2) |
| `mseccfg` (0x747) | MLPE (bit 10) |
| `mstatus` (0x300), `sstatus` (0x100), `vsstatus` (0x200) | MPELP / SPELP |
| `mnstatus` (0x744), `dcsr` (0x7B0) | MNPELP (bit 9), pelp (bit 28) |

`cfi_csr` only holds these fields. `csr_hit_o` tells the core's CSR file that
an address has CFI fields, and the core merges them into its own registers.
`henvcfg.SSE` and `senvcfg.SSE` read as zero while `menvcfg.SSE` is 0.

`cfi_enable` reduces the fields to two bits for the current mode:

| Mode | Shadow stack on | Landing pads on |
|---|---|---|
| M | never | `mseccfg.MLPE` |
| S/HS | `menvcfg.SSE` | `menvcfg.LPE` |
| VS | `menvcfg.SSE & henvcfg.SSE` | `henvcfg.LPE` |
| U | `menvcfg.SSE & senvcfg.SSE` | `senvcfg.LPE` |
| VU | `menvcfg.SSE & henvcfg.SSE & senvcfg.SSE` | `senvcfg.LPE` |

## Connecting `cva6_cfi` to a core

Parameters: `NrCommitPorts` (default 2). `XLEN` = 64, the transaction-ID width
(3 bits, an 8-entry scoreboard) and the label width (20) are set in
`cfi_pkg`.

| Port group | Contract |
|---|---|
| hart state | `priv_lvl_i`, `v_i`, `satp_mode_i`, `vsatp_mode_i`, held for the cycle |
| CSR port | `csr_addr_i`/`csr_we_i`/`csr_wdata_i`; the read (`csr_rdata_o`, `csr_hit_o`) is combinational; the write takes effect at the clock edge |
| traps | one-cycle pulses `trap_i` (with `trap_priv_i`, `trap_v_i`), `mret_i`, `sret_i` (with `sret_v_i`), `nmi_i`, `mnret_i`, `debug_entry_i`, `dret_i`; `ret_lpe_i` = landing pads on in the mode returned to; `flush_i` when the pipeline is flushed |
| decode | `instr_i` (a 16-bit instruction goes in bits 15:0) -> `dec_o`; `dec_o.valid` low means "not a CFI instruction, use the core's decoder" |
| issue/LSU | `lsu_valid_i`+`fu_data_i` in, `lsu_ready_o` and `ss_issue_stall_o` back; `lsu_valid_o`/`lsu_ready_i` to the LSU; the LSU's store and load write-back ports pass through and come out as `ss_store_*`/`ss_load_ex_o` for the scoreboard |
| MMU | the access being translated and its leaf PTE's R/W/X bits -> `mmu_ss_ex_o` |
| commit | `commit_instr_i[]` = the records at the head of the scoreboard, before exceptions are resolved; `commit_instr_o[]` = the same records, some now carrying a landing pad exception (commit from these); `commit_ack_i` = which ports actually retired, which `ssp` updates use |

All state changes on the rising edge of `clk_i`. Reset (`rst_ni`) is
active-low and asynchronous, and clears everything: ELP, the label, the enable
fields and `ssp`.

## Where this departs from the reference design

* **Encodings and codes.** The reference design gives no bit encodings,
  CSR addresses, bit positions or exception codes. All of them come from the
  ratified RISC-V specification. The reference design spells the pointer
  read both `ssprd` and `ssrdp`; this design uses `ssrdp`, the
  specification's name.
* **`sbe` in the landing pad unit.** The reference block diagram names an
  `sbe` signal between the units but does not say what it carries. Here it
  is the "an earlier port has an exception" flag described above.
* **Where the label is kept.** The diagram shows a path from the last unit
  back to the first. Here it is a register in `lpu_chain`.
* **Page policy.** Ordinary loads from shadow-stack pages fault, as in the
  reference design. The ratified specification allows them.
* **Own mechanisms.** The reference design does not describe these: the
  one-entry fault register and ready signal in the SSU; the one-`sspopchk`
  limit; the push/pop issue interlock and the retire-time `ssp` update; the
  priority of an LSU load exception over the pop comparison.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each
testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it shows |
|---|---|
| `tb_ssu` | filtering over every operation × mode × virtualisation × satp/vsatp setting; the fault's transaction ID; a fault parked behind a colliding store result; pop check match, mismatch and LSU-exception priority; an unrelated load ignored; the one-in-flight rule; 50 random return addresses with single-bit corruption |
| `tb_lpu` | every rule, directed; 3000 random commit records against a reference model |
| `tb_lpu_chain` | 4000 cycles of a random stream on two ports against a sequential one-instruction-at-a-time model; same-cycle jump and lpad, counted; faults dropping the rest of the group |
| `tb_cfi_csr` | `ssp` moves for 200 random push/pop patterns; enable fields and their read-only-zero rule; ELP save/restore through M, S and VS traps, a resumable NMI and debug mode |
| `tb_cfi_enable` | every mode and field combination |
| `tb_cfi_decoder` | every CFI instruction with the extensions on and off; near-miss and random words are not claimed |
| `tb_cfi_compressed_decoder` | all 65536 halfwords |
| `tb_ss_page_check` | all input combinations |
| `tb_cva6_cfi` | end to end: nested calls with `sspush`/`sspopchk` (32-bit and compressed) and lpad-guarded indirect calls; a corrupted return address; a jump to a non-lpad; a wrong label; `ssamoswap` in M-mode; translation off; wrong page types; `ssrdp`; the extensions disabled; ELP save and restore through a trap; the issue interlock. Each of these mechanisms is counted, and one that never happens is a failure |
| `tb_cfi_workload` | a quicksort with a comparison callback, the call pattern of a C library `qsort`: the sort function calls itself directly and guards its return address with `sspush`/`sspopchk`, and every comparison is an indirect call onto an `lpad`. It uses 40 random keys and three clean runs. Each run checks that the keys end sorted, the shadow stack ends balanced, and its deepest entry is 8 bytes × call depth. It also checks one `sspush` per call and one `lpad` per comparison. A fourth run overwrites one saved return address partway through and expects exactly one shadow-stack fault |

The surrounding core in `tb_cva6_cfi` is a testbench model. It has a
register file, a one-cycle LSU over a sparse memory, a page table with one
shadow-stack region, and in-order commit with traps into M-mode. `tb_cfi_workload` reuses the same model.
The CFI logic has not been run inside the real CVA6 pipeline. Running real programs
is therefore outside what these testbenches show. That includes the MiBench
automotive programs the reference design measured: up to 15.6% slowdown,
dominated by shadow-stack memory traffic.

## Simulating

Any testbench builds with plain Verilator (5.x). List the package first:

```
verilator --binary --timing --assert -Irtl rtl/cfi_pkg.sv rtl/cva6_cfi.sv \
          tb/tb_cva6_cfi.sv --top-module tb_cva6_cfi
./obj_dir/Vtb_cva6_cfi
```

`-Irtl` lets Verilator find the submodules by file name. Each testbench
finishes in well under a second. For lint, run
`verilator --lint-only -Wall -Irtl rtl/cfi_pkg.sv rtl/<module>.sv`.
