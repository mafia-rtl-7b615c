# MAFIA: signature and redundancy checking of a processor's control signals

Fault-injection attacks (laser, electromagnetic pulses, clock and voltage
glitches) can flip bits not only in memory and in instruction words but also
in the control signals inside a processor pipeline: a flipped write-back
enable, a forwarding multiplexer select or an ALU opcode changes what an
instruction does without touching its encoding or the program's control
flow. Checks on code integrity and control-flow integrity alone miss such
faults.

MAFIA closes this gap with two monitors that run beside an in-order pipeline
without changing its data path:

* **CACFI** (code authenticity and control-flow integrity) computes a running
  signature, as in generalized path signature analysis (GPSA), but over the
  **pipeline state**: the 64 bits of control signals that the decoder
  produces for each instruction, not the instruction word. Compiler-placed
  reference signatures are checked at selected control-flow instructions. A
  fault anywhere from instruction memory up to the register after decode
  changes the pipeline state, and therefore every later signature, and is
  caught at the next check.
* **CSI** (control-signal integrity) covers the rest of the pipeline: the
  control signals that travel beyond execute are kept a second time in
  redundant form and compared, stage by stage, with the pipeline's own copy.

This repository holds synthesizable SystemVerilog for both monitors, the two
signature functions (CRC32, and a CBC-MAC over the PRINCE block cipher), the
patch-loading path, interrupt support and a set of self-checking testbenches.
The host processor (a 4-stage RV32I core such as CV32E40P) is not included:
everything MAFIA needs from it is a port of `mafia_top`.

## 1. The signature scheme

A program is cut into basic blocks. For every instruction that reaches
execute, CACFI updates its signature register

    S <- f(S, pipeline_state)

so the signature at any point depends on every instruction executed and on
their order. Where two paths join, their signatures differ; the compiler
makes them equal again with a **patch**: before the control-flow instruction
of all but one predecessor it inserts `MAFIA.ldp`, which loads a patch value
P into the patch register, and the taken control-flow instruction applies
the update

    S <- u(S, P) = S xor P

After every control-flow instruction, taken or not, P returns to its default
value 0 (the identity of xor), so a branch without a preceding `MAFIA.ldp`
changes nothing. The signature generator (an offline tool) knows the program
and the signature function, and computes all reference signatures and patch
values.

**Verification instructions** are control-flow instructions (each RV32I
branch and jump has a verifying variant) followed in program memory by a
32-bit reference word. When one executes, CACFI compares the low 32 bits of
its signature, taken after the verification instruction itself has been
folded in and before its update, with that word. A mismatch raises
`sig_fault_o` and hence `alarm_o`, the request for an exception to a
software fault handler. The signature register is never visible to software.

Because f and u preserve errors, a fault folded into the signature stays
there; the compiler can place verifications sparsely (for example once at a
function's exit) and still catch it, at the cost of detection delay.

## 2. One instruction through the monitor

The monitor sees each instruction in its **execute** cycle. This is the
part of the design that the host core must match exactly:

| cycle | host core | MAFIA |
|---|---|---|
| t | instruction leaves decode: `id_ex_en_i`, `id_ctrl_i`, `id_instr_i` | pipeline-state register loads |
| t+1 | instruction in execute; branch resolved; for a verification instruction the following word (the reference) sits in the fetch/decode register | `S <- f(S, state)`; update or save (section 5); reference compared if `ref_valid_i` |
| t+1 or later | `ref_valid_i` if the reference word arrives late | comparison against the value held since t+1 (`verify_pending_o` high meanwhile) |
| t+1 or later, before the next control-flow instruction | `mispredict_i` | roll-back |
| t+1 | `MAFIA.ldp` in execute | `ldp_req_o`, `ldp_addr_o` to the load-store unit |
| later | `ldp_rvalid_i`, `ldp_rdata_i` | patch register written |

`stall_o` is high while a control-flow instruction waits in decode
(`id_is_cf_i`) and a patch load is still in flight; the core must hold that
instruction in decode. Without the stall a branch right behind its
`MAFIA.ldp` would apply the old patch. The core should raise `id_is_cf_i`
for a `MAFIA.ldp` in decode too: only one patch load may be outstanding,
and the upper half of a 64-bit patch often follows its lower half
directly.

## 3. The pipeline state

64 bits, packed by `mafia_pkg::pack_pstate` from the decoder's control
groups (`dec_ctrl_t`):

| bits | width | group |
|---|---|---|
| 63:41 | 23 | operand-selection multiplexer controls |
| 40:37 | 4 | operand-forwarding multiplexer controls |
| 36:30 | 7 | ALU operation |
| 29:28 | 2 | load/store read and write enables |
| 27:18 | 10 | register write-back controls |
| 17:8 | 10 | immediate bits not already covered by the operand selects |
| 7:0 | 8 | zero padding |

The group widths are those of the CV32E40P integration; the order and the
zero padding are this implementation's choice, and the signature generator
must use the same layout. Every group must be a deterministic function of
the instruction and of its position inside its basic block: this is why
forwarding controls may be included only if the compiler breaks forwarding
dependencies across basic-block boundaries (with a `nop` where needed),
and why data-dependent signals such as the branch decision are excluded.
The individual bits inside each group belong to the host decoder and are
treated as opaque.

The state is taken from a register at the decode/execute boundary
(`mafia_pipeline_state`), so that the register itself is covered by the
signature.

## 4. Signature functions

`SIG_FUNC` selects one of two single-cycle functions.

**CRC32** (`mafia_sig_crc32`, default). The whole 64-bit state is shifted
into the 32-bit signature, most significant bit first, in one combinational
step. The generator polynomial is 0xFA567D89 as listed in Koopman's
notation, where the top bit stands for x^32 and the +1 term is implied; the
shift register therefore uses 0xF4ACFB13. This polynomial was selected for
needing at least 8 flipped bits to produce a collision over basic blocks up
to 40 instructions. A CRC has no secret, so this variant gives code
integrity but not authenticity.

**CBC-MAC/PRINCE** (`mafia_sig_cbcmac`, `prince_cipher`). The signature is a
64-bit CBC-MAC chaining value, `S <- PRINCE_K(S xor state)`, with PRINCE
fully unrolled (12 rounds of combinational logic) under a 128-bit key input
`key_i` = {k0, k1}. Only the low 32 bits are verified, which keeps reference
words at 32 bits. Without the key nobody can produce valid reference words,
so this variant also gives code authenticity. Patches, IVs and the context
register are then 64 bits wide; a 64-bit patch is loaded by two `MAFIA.ldp`,
one per half (`instr_info_t.ldp_hi`). `prince_cipher` follows the published
cipher and reproduces its published test vectors.

## 5. Branch prediction and roll-back

The pipeline may fold instructions from a predicted path into the signature
before the branch resolves. CACFI therefore keeps a **save register**. When a
control-flow instruction is folded in, the signature continues along the
predicted direction (`instr_info_t.pred_taken`) and the save register takes
the value for the other direction:

| prediction | signature register | save register |
|---|---|---|
| not taken | f(S, state) | f(S, state) xor P |
| taken | f(S, state) xor P | f(S, state) |

`mispredict_i` copies the save register back. It may come in the same cycle
as the branch's state (a core that resolves branches in execute and never
lets a wrong-path instruction reach execute) or any later cycle before the
next control-flow instruction; the wrong-path instructions folded in
meanwhile are discarded with it. Jumps are simply marked `pred_taken`.

## 6. Interrupts

An interrupt handler has no fixed predecessor, so each handler starts from
its own initialization vector. `mafia_irq_context` holds a table of 32 IVs,
written at boot through `iv_we_i`/`iv_idx_i`/`iv_wdata_i`, and the context
store. On `irq_take_i` the current signature is saved and the signature
register loads the IV of `irq_id_i`; on `mret_i`, given in the execute cycle
of the handler's return instruction, the saved value comes back (the return
instruction can itself be a verification instruction that checks the whole
handler). The default store is a single context register; `CTX_DEPTH > 1`
turns it into a stack for nested interrupts. Pushing onto a full store or
returning with an empty one raises `ctx_fault_o`.

Interrupts must only be taken at a basic-block boundary, where the compiler
has already broken forwarding dependencies; `irq_allow_o` is high when the
last instruction folded in was a control-flow instruction, and an assertion
checks that `irq_take_i` respects it.

## 7. Patches and the patch CSR

`mafia_patch_loader` holds the base address of the `.patches` section in a
CSR (number `PATCH_CSR_ADDR`, 0x7C0 by default), which boot code writes
once. `MAFIA.ldp` carries a 20-bit offset (`instr_info_t.ldp_offset`); the
load address is base + offset, in bytes by default, or base + 4 x offset with
`WORD_OFFSET = 1`. The byte offset reaches 2^20 bytes (2^18 32-bit
patches); the word offset, usable when patches are 4-byte aligned, reaches
2^22 bytes (2^20 patches). The
load goes through the core's load-store unit (`ldp_req_o`/`ldp_addr_o` out,
`ldp_rvalid_i`/`ldp_rdata_i` back, any latency of one cycle or more). One
patch load may be outstanding at a time.

## 8. Control Signal Integrity

`mafia_csi` duplicates the 12 control bits that leave decode and are still
needed after execute: the 2 load/store enables and the 10 write-back
controls (the ALU controls are consumed in execute and are covered by the
signature through the decode/execute register). For each later pipeline
register the core reports its load (`stage_en_i`), its bubble
(`stage_clr_i`, which clears the core's register to zero and sets the shadow
to the redundant form of zero) and its current contents
(`stage_ctrl_i`); CSI loads its shadow copy in step and compares every cycle.
Any difference raises `csi_fault_o` in that cycle. `NSTAGES` is 1 for a
4-stage core (one register after execute) and 2 for a classic 5-stage
pipeline. `DUP_MODE` selects a plain copy (default), an inverted copy or a
copy xored with `XOR_MASK`. `NCOPIES` (default 1) keeps several such
copies per stage, each compared with the core's signals. An attacker would
have to flip the same bit in the core's register and in every copy at once.

## 9. `mafia_top` interface

| port | dir | meaning |
|---|---|---|
| `clk_i`, `rst_ni` | in | clock, active-low asynchronous reset |
| `key_i[127:0]` | in | CBC-MAC key (unused with CRC32) |
| `id_ex_en_i`, `id_ctrl_i`, `id_instr_i` | in | instruction leaving decode, its control groups, its MAFIA role |
| `id_is_cf_i` / `stall_o` | in / out | control-flow instruction (or `MAFIA.ldp`) waiting in decode / hold it there |
| `mispredict_i` | in | roll back the last control-flow instruction |
| `ref_valid_i`, `ref_sig_i[31:0]` | in | reference word of the current verification |
| `csr_we_i`, `csr_addr_i`, `csr_wdata_i`, `csr_rdata_o` | in/out | CSR access (patch base) |
| `ldp_req_o`, `ldp_addr_o`, `ldp_rvalid_i`, `ldp_rdata_i` | out/in | patch load through the load-store unit |
| `iv_we_i`, `iv_idx_i`, `iv_wdata_i[63:0]` | in | interrupt IV table write |
| `irq_take_i`, `irq_id_i`, `mret_i`, `irq_allow_o` | in/out | interrupt entry, return, permission |
| `stage_en_i`, `stage_clr_i`, `stage_ctrl_i` | in | the core's later pipeline registers, for CSI |
| `verify_pending_o` | out | a reference word is still awaited |
| `sig_fault_o`, `csi_fault_o`, `csi_stage_fault_o`, `ctx_fault_o`, `alarm_o` | out | fault indications; `alarm_o` is their OR |

`instr_info_t` (in `mafia_pkg`) carries, per instruction: `is_cf`,
`is_verify`, `pred_taken`, `is_ldp`, `ldp_hi`, `ldp_offset`. The encodings of
the MAFIA instructions are left to the host decoder, which fills this
struct.

Parameters: `SIG_FUNC` (`SIG_CRC32` or `SIG_CBCMAC`), `NSTAGES` (1),
`NUM_IRQ` (32), `CTX_DEPTH` (1), `DUP_MODE` (`DUP_COPY`), `NCOPIES` (1),
`PATCH_CSR_ADDR` (0x7C0), `WORD_OFFSET` (0), `BOOT_IV` (0, the signature at
reset, which the signature generator must assume at the program's entry
point).

## 10. Files

| file | content |
|---|---|
| `rtl/mafia_pkg.sv` | widths, `dec_ctrl_t`, `instr_info_t`, enums, pipeline-state packing |
| `rtl/mafia_pipeline_state.sv` | decode/execute pipeline-state register |
| `rtl/mafia_sig_crc32.sv` | CRC32 step |
| `rtl/prince_cipher.sv` | unrolled PRINCE encryption |
| `rtl/mafia_sig_cbcmac.sv` | CBC-MAC step |
| `rtl/mafia_irq_context.sv` | IV table and context register/stack |
| `rtl/mafia_patch_loader.sv` | patch CSR, `MAFIA.ldp` loads, busy |
| `rtl/mafia_cacfi.sv` | signature, patch and save registers, verification, interrupts |
| `rtl/mafia_csi.sv` | redundant later-stage control copy and comparison |
| `rtl/mafia_top.sv` | everything wired together |
| `tb/tb_*.sv` | one self-checking testbench per module, plus end-to-end tests of `mafia_top` |

At the defaults (CRC32), a coarse synthesis of `mafia_top` gives about 1300
flip-flop bits, 1024 of them the interrupt IV table, and about 330 coarse
cells; the PRINCE variant adds a 12-round combinational cipher (its S-boxes
appear as 12288 ROM bits before mapping to gates).

## 11. Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and stops by itself
(with a watchdog). Run them with `--assert`: the modules carry assertions
for the core's obligations (interrupts only at block ends, one patch load
outstanding, a reference word only when one is expected). With Verilator
5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/mafia_pkg.sv tb/tb_mafia_top.sv --top-module tb_mafia_top
    ./obj_dir/Vtb_mafia_top

Replace `tb_mafia_top` by any other testbench name. What they check:

* `tb_mafia_sig_crc32`: fixed vectors from a software CRC and 200 random
  inputs against polynomial long division.
* `tb_prince_cipher`, `tb_mafia_sig_cbcmac`: the cipher's published test
  vectors, values from an independent software model, and 1000 random
  encryptions / a 500-step random chain against a second PRINCE written in
  the testbench in another style.
* `tb_mafia_cacfi`: a random stream of 600 instructions with patches,
  predicted and mispredicted branches (roll-back in the same and in the next
  cycle), verifications with good and corrupted reference words arriving
  early or late, and interrupts, against a model of the program semantics
  that knows nothing of prediction; plus a fixed CBC-MAC sequence with a
  64-bit patch.
* `tb_mafia_top`: the default configuration end to end, with a model of the
  core's pipeline and patch memory. A fault-free phase must never alarm; a
  fault phase flips decoded control bits (caught by the next verification)
  and bits in the core's write-back register (caught by CSI). Every
  mechanism (verification, patch load, load stall, taken update, both
  roll-back timings, interrupts, CSR, both detections) is counted and must
  occur.
* `tb_mafia_top_cbcmac`: the same end to end, in the other configuration:
  CBC-MAC/PRINCE under a random key (the testbench has its own PRINCE,
  checked against the published vectors), 64-bit patches in two halves, a
  5-stage pipeline with two CSI stages, each kept as two inverted copies, nested
  interrupts on a two-entry context stack, word offsets, a non-default CSR
  number and reset signature.
* `tb_mafia_workloads`: instruction streams with the patch and
  reference-signature counts of the 19 Embench-IoT programs the design was
  evaluated on, each at -O2 and -Os (up to 1611 patches, a 6444-byte patch
  section), on the default configuration: every patch load must address its
  own word, every verification must pass, and the counts must match. The
  programs themselves need the host core and the instrumenting compiler and
  are not run. With a two-cycle patch memory, a branch right behind its
  `MAFIA.ldp` waits 3 cycles in decode.
* `tb_mafia_fault_campaign`: an exhaustive single-fault campaign on a
  24-instruction, 62-cycle routine shaped like a PIN check (call, compare
  loop, patches, one misprediction, a verification in the middle and a
  verified return). Every mask of 1 to 8 adjacent bits is applied to the
  decoded control signals of every instruction (10080 runs, each caught by
  a verification) and to the control register after execute in every
  cycle (4216 runs, each caught by CSI in that cycle).
* `tb_mafia_pipeline_state`, `tb_mafia_irq_context`,
  `tb_mafia_patch_loader`, `tb_mafia_csi`: the smaller blocks.

## 12. Where this RTL departs from, or goes beyond, the published design

* The host core and its decoder are outside this RTL. The published design
  modifies the CV32E40P decoder to add the verification instructions and
  `MAFIA.ldp` and to route the pipeline-state signals; here those signals are
  ports, and the instruction encodings are not fixed.
* The order of the pipeline-state groups, the zero padding, the CRC bit
  order, the reading of the polynomial in Koopman's notation, the CSR number,
  the reset signature, the IV write port and the number of IVs are choices
  made here where the published description is silent.
* The exact cycle in which verification and roll-back happen, the pending
  reference register, the one-outstanding patch load and the context-store
  alarms are choices of this implementation.
* CSI here duplicates the load/store and write-back controls only. The
  published design recommends also covering the branch-prediction control
  signals of a core that has a predictor; `mafia_csi` takes any `CTRL_W`,
  so such signals can be appended to its input, but `mafia_top` (sized for
  a core without a predictor) does not do so. Likewise `mafia_csi` supports
  several redundant copies (`NCOPIES`); `mafia_top` uses one by default.
* CSI's copy is loaded from the same decode/execute register that feeds the
  signature, so a fault in that register is caught by the signature and
  everything after it by CSI.
* Suggested but not built: a watchdog bounding the time between
  verifications, a shadow stack for returns, and a differential encoding of
  the alarm line.
* The compiler passes and the signature generator that produce signed
  programs are software and are not part of this repository; the testbenches
  compute reference signatures and patches themselves.
