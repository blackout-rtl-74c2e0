# Blinded capabilities: hardware-enforced data-oblivious code on a CHERI core

Constant-time ("data-oblivious") code is the standard defence against timing and
cache side channels. Secrets must never decide a branch, pick a jump target or
form a memory address, because every one of those leaves a trace in the timing,
the caches or the predictors. Compilers and programmers get this wrong easily,
and speculation can break it even in code that is correct.

The idea of BLACKOUT is to make the processor enforce the discipline. Secret
data lives in memory reached only through *blinded capabilities*. These are
ordinary CHERI capabilities with one permission bit cleared. Everything loaded
through such a capability is marked *blinded* in the register file. The mark
follows the data through arithmetic. Any attempt to use blinded data for control
flow or addressing, or to write it where a normal capability could read it back,
raises a fault. The check is combinational and adds no cycles. A violation on a
mis-speculated path never becomes visible: blinded operands are zeroed before
they reach address or predictor logic, and the fault is only raised if the
instruction commits.

This repository holds the RTL of that extension: the logic a speculative
out-of-order CHERI-RISC-V (RV64) core needs to gain. The core itself stays
outside, along with its fetch, rename, reorder buffer, functional units, caches,
capability register file and bounds checks. It connects through the ports of
`blackout_core_ext`.

## 1. Blinded capabilities

A 128-bit CHERI capability carries permissions, an object type (sealing),
compressed bounds and a 64-bit address. A separate validity tag says whether the
word is a real capability. The extension takes one of the three spare bits next
to the 12 hardware and 4 user permissions. This is the **non-oblivious access**
bit:

* `1` (the default in every newly created capability): an ordinary capability.
* `0`: a **blinded capability (BC)**.

No instruction is added. Software blinds a capability with the existing
`candperm` instruction by leaving the bit out of the mask. `candperm` can only
clear permissions, so a blinded capability can never be turned back into an
ordinary one.

Bit positions used here (`rtl/blackout_pkg.sv`):

| field | capability word bits | `cgetperm` / `candperm` mask bit |
|---|---|---|
| user permissions (4) | 127:124 | 18:15 |
| hardware permissions (12) | 123:112 | 11:0 |
| non-oblivious access | 111 | 12 |
| spare | 110:109 | 14:13 |
| object type (18) | 108:91 | - |
| bounds (27) | 90:64 | - |
| address | 63:0 | - |

`cap_perm_unit` implements:

* `candperm`: an AND with the mask over all three permission groups. As in CHERI, the tag is cleared when the capability is sealed.
* `cgetperm`.
* the root permission vector.
* an `is_blinded` flag, which is valid-tag AND NOT non-oblivious.

## 2. Blinded registers and how blindedness spreads

Each general-purpose capability register gets a **blindedness bit**
(`blindedness_bits`). The bit is set by a load through a BC, and it spreads
through computation (`taint_propagation`). Writing public data into a register
clears it.

The full rule set is implemented in `side_channel_prevention` (decision logic)
and `blinded_ls_check` (memory). In the table, "cap" is the capability used by
the instruction, "addr reg" is the blindedness of the address or target register,
and "data" is the blindedness of the operand or store data.

| instruction | cap is a BC | addr reg blinded | data blinded | result |
|---|---|---|---|---|
| arithmetic / logic / mul / div / FP | - | - | a, b | allowed; result blinded = a OR b |
| branch | - | - | either condition operand | **fault** |
| jump through register | yes | - | - | **fault** |
| jump through register | - | yes | - | **fault** |
| load | no | no | - | result not blinded |
| load | yes | no | - | result **blinded**, tag cleared |
| load / store | any | yes | - | **fault** (no secret addresses) |
| store | no | no | yes | **fault** (secret would leak to public memory) |
| store | yes | no | any | allowed; only the data is stored, never the blindedness bit |
| capability store through a BC | yes | no | tagged word | **fault** (no capabilities in blinded memory) |
| capability-modifying instruction | - | - | any operand | **fault** |

These rules maintain five invariants:

1. Blinded data is written to memory only through BCs.
2. No capability is ever written into blinded memory.
3. Blinded and ordinary capabilities never cover the same bytes. Hardware cannot check this cheaply; the allocator keeps it.
4. No control flow depends on blinded data.
5. No address depends on blinded data.

Register 0 is never blinded.

## 3. Spilling blinded registers: blinded register records

A compiler has to spill registers to the stack, and the stack is reached through
an ordinary capability (`csp`). Under the store rule above, spilling a blinded
register would fault. Spilling it as plain data would also lose its blindedness:
reloading it would yield a public value, and the secret would be laundered.

The extension's answer is the **blinded register record (BRR)**. A capability
store (`csc`) of a blinded register through `csp` does not fault. It writes a
128-bit record instead:

* the tag is set;
* the upper 64 bits hold a fixed **marker**;
* the lower 64 bits hold the value.

The set tag means an ordinary integer store cannot forge a record. The marker is
a metadata pattern that no real capability can have: zero permissions, spare
bits `11` and the reserved object type `0x3FFF0`.

When a capability load (`clc`) reads a tagged word whose upper half equals the
marker, `blinded_ls_check` recognises a BRR. It writes the value into the
destination with null metadata and tag 0, and sets the register's blindedness
bit.

Other rules:

* A `csc` of a blinded register through any other ordinary capability still faults.
* So does an integer store of blinded data through an ordinary capability.
* `csp` is recognised by its register number, `c2`, as in the CHERI-RISC-V ABI.

## 4. Speculation: trap only at commit

A violation is detected while the instruction executes, which may be on a
mis-predicted path. Two things happen at once:

* **Zeroing.** The blinded operand is replaced by zero on every output that feeds
  decision-making logic (`*_dec_op*`, `m_dec_vaddr`), and the access or redirect is
  killed (`*_kill`). The secret therefore never reaches the cache, the TLB or the
  predictors, even transiently. Arithmetic operands are not zeroed: the functional
  units are assumed to run in a data-independent-timing mode.
* **Recording.** The cause is written into a per-reorder-buffer-entry record
  (`commit_fault_gate`).

When the entry commits and its record is non-empty, the core takes a capability
exception with cause `0x1C` (`commit_trap`, `commit_cause`), and the predictor
training record of that instruction is zeroed. A squashed instruction never
commits, so its record is dropped. Allocating the entry again clears it, and
`squash_all` clears every record. This gives the Spectre-style attacks (PHT, BTB,
RSB, STL) nothing to observe: the transient access never carries the secret.

## 5. Connecting it to a core

`blackout_core_ext` has three pipeline port groups, one per execution pipeline of
a Toooba-style core, plus commit ports:

* `a_*`: the **ALU / branch** pipeline.
  * Inputs: micro-op class (`uop_e`), ROB index, `rs1`/`rs2`/`rd`, which sources are registers (`a_src_used`), the `rs1` capability and `op2`.
  * Outputs: zeroed decision operands, kill, result blindedness, and the `candperm`/`cgetperm` results.
  * Jumps and capability-modifying instructions run here.
* `f_*`: the **FPU / Int-Mul / Int-Div** pipeline. It has three sources, for fused multiply-add.
* `m_*`: the **memory** pipeline.
  * The request side (address stage) takes the address capability, the effective address and the store data. It returns the kill, the zeroed address, the store word to send to the cache, `m_req_bc` and `m_req_brr`.
  * The load/store queue must carry `m_req_bc` to the response side (`m_resp_bc`).
  * The response side returns the register value, its blindedness and whether a BRR was restored.
* `rob_alloc_*`, `squash_all`, `commit_*`, `bp_train_*`: reorder buffer events, the trap, and the predictor training path.

Timing:

* Every check and the propagation are combinational, in the cycle the instruction is presented, so no instruction takes longer.
* Blindedness bits and fault records update at the clock edge. The bit file has no internal write-to-read bypass, because a same-cycle bypass would form a loop for `rd == rs`.
* An instruction issued in the cycle its producer writes back must take the blindedness bit from the core's own bypass network, alongside the value. In a renaming core, `NUM_REGS` is the physical register count.

| module | role |
|---|---|
| `blackout_pkg` | capability layout, permission bit positions, BRR marker, micro-op classes, fault causes |
| `blindedness_bits` | one bit per register; 7 read ports, 3 write ports, last write port wins |
| `taint_propagation` | per writeback: blinded = forced (load through a BC or BRR restore) OR any used source blinded |
| `side_channel_prevention` | fault rules and operand zeroing per micro-op class; one per pipeline |
| `blinded_ls_check` | store data/tag shaping, invariants 1 and 2, BRR write/recognition, load blindedness |
| `cap_perm_unit` | `candperm`, `cgetperm`, root permissions, `is_blinded` |
| `commit_fault_gate` | per-ROB fault records, trap at commit, predictor-training mask |
| `blackout_core_ext` | top: wires the above to the three pipelines and the commit stage |

Parameters: `NUM_REGS = 32`, `ROB_ENTRIES = 64`. The paper gives neither, so both are choices.

## 6. Simulating

Every module in `rtl/` (the package aside) has a self-checking testbench `tb/tb_<module>.sv`. Each
ends by printing `TB_RESULT checks=N failures=M` and has a cycle watchdog. With
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
        rtl/blackout_pkg.sv tb/tb_blackout_core_ext.sv --top-module tb_blackout_core_ext
    ./obj_dir/Vtb_blackout_core_ext

The testbenches:

* The unit testbenches drive random or exhaustive stimulus and compare against models written independently in the testbench.
* `tb_commit_fault_gate` uses a 16-entry reorder buffer to reach wrap-around quickly.
* `tb_blackout_core_ext` runs the top at its default sizes. It plays a short program through the three pipelines and commit:
  * blind a capability;
  * store and load secrets;
  * propagate through ALU and multiplier;
  * trip each fault kind;
  * take a violation under mis-speculation and squash it;
  * spill and restore a blinded register through `csp`;
  * do a public load alongside.

  It counts how often each mechanism occurred, and a mechanism that never occurred counts as a failure.
* `tb_noninterference` runs a data-oblivious lower-bound search over 16 blinded words twice, with different secrets.
  * Each step issues three transient instructions on the secret and squashes them, in the style of the Spectre gadgets: a branch on it (PHT), an indirect jump to it (BTB/RSB), and a load addressed by it (the leaking access of PHT and STL gadgets).
  * Every fourth step spills the blinded count through `csp` and restores it.
  * The testbench samples every output that can reach decision-making logic in every cycle: kills, decision operands, memory addresses, flags, traps and predictor training. It requires the two runs to be identical cycle for cycle, and it requires the results to differ and to be correct.

## 7. Departures from the paper and choices made here

* **Bit positions, marker, cause code.** The paper fixes none of these.
  * The bit positions in the capability word, the marker pattern and the exception cause `0x1C` are this design's.
  * The micro-op classes and the fault-cause enumeration, which tell the host pipeline why a fault happened, are also this design's.
* **Capability-modifying instructions fault on any blinded operand.** The paper faults a capability-modifying instruction whose operands would make the resulting capability blinded. Under the propagation rule, any blinded operand does that.
* **Spill rule scope.** The store table says a blinded store through an ordinary capability faults, while the spill mechanism allows one through `csp`. Here only `csc` through `c2` is exempt, and it always writes a BRR.
* **BRR restore.** Any `clc` that reads a tagged marker word restores a blinded register, whatever capability it used. An integer load of a BRR slot returns the untagged value as public data. Software must not do that, because the slot is ordinary stack memory.
* **Loads through a BC.** The tag of anything loaded through a BC is always cleared, so valid capabilities are never blinded.
* **Fault records are extra state here.** The extension is said to need no storage beyond one bit per register. A reorder buffer already carries an exception cause per entry, and the natural integration writes the violation cause into that field. `commit_fault_gate` holds its own 3-bit record per entry so the extension can be simulated without a host reorder buffer. When integrating, this record can be folded into the existing field.
* **Capability stores into blinded memory.** The store rules allow any store through a BC regardless of the data, while the invariant forbids storing a capability there. The invariant is followed: a tagged word stored through a BC faults. Untagged data is allowed and is stored untagged.
* **Invariant 3** (no overlap between blinded and ordinary memory) is left to software, as in the paper.
* **Zeroing granularity.** A trapping commit zeroes its whole predictor-training record. The paper says only that blinded data must not reach predictors.
* **No added latency.** This is checked in the top testbench, which reads every result in the cycle the instruction is presented. The slowdowns the paper measures come mostly from software (compiler and allocator work such as zeroing blinded memory), which is not part of this RTL.
* **Floating-point registers** share the index space and bit file here. The paper does not discuss how blindedness applies to a separate FP register file.

## 8. What is not here

The host core is not here: fetch and decode, branch predictor, rename, reorder
buffer, commit stage, integer and floating-point units, caches, tag cache, the
CHERI capability register file, and the data and PCC bounds checks. The extension
only adds to those blocks, and their design is the base CHERI core's, not part of
this work. Their interaction points are the top's ports.

The system-level evaluations need that full core with an operating system, so
they cannot run on this RTL alone: CoreMark, the data-oblivious benchmarks
(binary search, sorting, max, matrix multiply, neural network) at 2^12-2^20
elements, and the cryptographic libraries. The extension-level part of the
Spectre and non-interference evaluations is simulated in the testbenches
described above.
