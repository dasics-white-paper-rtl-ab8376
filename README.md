# DASICS protection logic for a RISC-V core

A program often runs third-party library code in the same address space as
its own code. If the library has a memory bug, or is malicious, it can read
any data the program holds, overwrite any of it, and jump anywhere. DASICS
(Dynamic in-Address-Space Isolation by Code Segments) stops that in
hardware. It needs no new pointer format and no recompiled library. The
main idea is that **the code address is the subject of protection**:

* Every privilege level has one *trusted zone*, an address range of code.
  An instruction whose PC lies in that range is trusted; every other
  instruction at that level is untrusted.
* Trusted code sets, through CSRs, what the untrusted code it is about to
  call may do:
  * which data ranges it may read or write (memory bound registers);
  * which code ranges it may branch or jump into (active zones).
* Untrusted code cannot change those registers. Every load, store, branch
  and jump it makes is checked against them. A violation becomes an
  exception at the *same* privilege level. A user-mode library that
  misbehaves traps to a handler in the user program's trusted zone, not to
  the kernel.
* Control may come back into trusted code only in three ways: at the
  return address saved when trusted code made the call, at one registered
  trusted-call entry point, or through the exception handler. A library
  that overwrites its return address on the stack therefore cannot return
  into the middle of `main`.
* An `ecall` (system call) issued by untrusted code is intercepted in the
  same way. The trusted handler can inspect the call and perform it for
  the library, or refuse it.

The same mechanism runs one level up. The kernel has its own trusted zone,
so untrusted drivers inside the kernel can be confined. Each level's zone
can only be set from the level above it: M-mode sets S-mode's zone, and
S-mode sets U-mode's zone.

This RTL implements the DASICS logic that is added to a core. It does not
include the core itself (fetch unit, decode, reorder buffer, load/store
units, TLB, caches, supervisor trap CSRs). Those are ports of the top
module `dasics_top`.

## Block structure

```
            fetch packet PCs                 taken branch (target, tag)
                  |                                   |
            +-----v------+                  +---------v-----------+
            | dasics_    |-- untrusted ---> | dasics_branch_      |--> br_fault
            | tagger     |   tag per instr  | checker             |
            +-----^------+                  +---------^-----------+
                  |  trusted zones                    | active zones
 CSR access  +----+-------------------------------------+-------------+
 ----------->|                    dasics_csr                          |
             +----+-----------------------+---------------^-----------+
                  | memory bounds         | active zones, | return PC of
                  |                       | entry, ret PC | dasicscall.jr
        +---------v---------+       +-----v---------------+----+
 ld/st->| dasics_mem_checker|       | dasics_jump_checker      |<-- jal/jalr
        | 2 load + 2 store  |       |                          |
        +---------+---------+       +-----------+--------------+
                  | ld_fault/st_fault            | jmp_fault
                  v                              v
              (core marks the instruction; ROB commits it on exc_*)
                                  |
                          +-------v-------+
 ecall / uret  ---------->|  dasics_trap  |--> redirect to utvec / uepc (U level)
                          | utvec uepc .. |--> strap_* request (S level)
                          +---------------+
```

| module | role | state |
|---|---|---|
| `dasics_pkg` | types, CSR addresses, cause codes, range functions | - |
| `dasics_csr` | all DASICS configuration and its access rules | 3002 flip-flops |
| `dasics_tagger` | tags each instruction of a 16-wide fetch packet | none |
| `dasics_branch_checker` | targets of taken branches of untrusted code | none |
| `dasics_jump_checker` | jal/jalr targets of untrusted code; saves the return PC | none |
| `dasics_mem_checker` | loads/stores of untrusted code against 16 bounds | none |
| `dasics_trap` | turns violations into traps at the same level; user trap CSRs | 320 flip-flops |
| `dasics_top` | wires the above together | - |

All checks are combinational. A request is answered in the cycle it is
presented, so the checks can run alongside the TLB lookup and add no
pipeline stage. Registers change on the rising clock edge. Reset is
synchronous and active low, and it turns protection off.

## Trusted and untrusted code

`dasics_tagger` sees the PCs of a fetch packet and the current privilege
level:

* M-mode code is always trusted.
* S-mode code is untrusted when S-mode protection is on and the PC is
  outside `[smain_lo, smain_hi)`.
* U-mode code is untrusted when U-mode protection is on and the PC is
  outside `[umain_lo, umain_hi)`.

The core must carry this tag with each instruction. Every checker input
called `*_untrusted` expects it back. Trusted instructions are never
faulted.

## What untrusted code may do

**Data.** `dasics_mem_checker` checks a load or store of untrusted code
against 16 memory bound registers. Each register has a `[lo, hi)` range and
the bits V (valid), R (read) and W (write). The whole access,
`[vaddr, vaddr + 2^size)`, must lie inside one valid bound that grants the
operation. R is needed for a load and W for a store. An access that starts
inside a bound but ends past it faults. The end address is computed one bit
wider, so an access near the top of the address space cannot wrap around.

**Branches.** A taken conditional branch of untrusted code must land in an
*active zone*. An active zone is one of 4 jump bound registers, with a
`[lo, hi)` range and the bits V and X. Both bits must be set. The fetch unit
reports the branch, and `dasics_branch_checker` answers with `br_fault`.

**Jumps.** `dasics_jump_checker` lets a jal/jalr of untrusted code go only
to:

1. the return PC that trusted code saved when it made the call,
2. the registered trusted-call entry point, or
3. an active zone.

Any other target faults. Trusted code calls a library with a special jump,
`dasicscall.jr`. The core flags it with `jmp_is_dasicscall`. When the
caller is trusted, the checker writes `pc + 4` into the return-PC register.
When the caller is untrusted, the instruction is checked like any other
jump and leaves the return-PC register unchanged. Otherwise a library could
set its own legal return address.

A library with several functions calling each other needs its own code
range as an active zone. Otherwise it cannot jump within itself.

## Configuration registers

The addresses below are this design's own allocation. Software only needs
to agree with `dasics_pkg`.

| address | name | contents | who may access |
|---|---|---|---|
| 0x9E0 | SMAIN_CFG | bit 0: S-mode protection on | M |
| 0x9E2 / 0x9E3 | SMAIN_LO / HI | S-mode trusted zone | M |
| 0x5E0 | UMAIN_CFG | bit 0: U-mode protection on | M, trusted S |
| 0x5E2 / 0x5E3 | UMAIN_LO / HI | U-mode trusted zone | M, trusted S |
| 0x880 | MEM_CFG | nibble *i* = {0, W, R, V} of memory bound *i* | trusted code |
| 0x890 + 2*i* / +1 | MEM_LO*i* / HI*i* | memory bound *i*, *i* = 0..15 | trusted code |
| 0x8B0 | MAINCALL | trusted-call entry point | trusted code |
| 0x8B1 | RETPC | return PC saved by `dasicscall.jr` | trusted code |
| 0x8C0 + 2*i* / +1 | JUMP_LO*i* / HI*i* | active zone *i*, *i* = 0..3 | trusted code |
| 0x8C8 | JUMP_CFG | nibble *i* = {0, 0, X, V} of active zone *i* | trusted code |
| 0x005, 0x040-0x043 | utvec, uscratch, uepc, ucause, utval | user trap registers | trusted code |

If an access breaks these rules, `csr_illegal` is raised and nothing is
written. The core should raise an illegal-instruction exception. Reads are
refused under the same rules as writes. Untrusted code therefore cannot
even learn its own bounds or the saved return PC.

## Exceptions at the same privilege level

A fault from a checker only marks the instruction. An out-of-order core
must wait until the instruction is the oldest one, and then report it on
`exc_valid`/`exc_kind`/`exc_pc`/`exc_tval`. An `ecall` is reported on
`ecall_valid` together with its tag. `dasics_trap` then acts as follows:

* **U-mode.** It writes `uepc`, `ucause` and `utval` at the next edge, and
  in the same cycle asserts `redirect_valid` with `redirect_pc = utvec`.
  Only direct mode is supported: the low two bits of `utvec` are ignored.
  The handler ends with `uret`. On `uret_valid`, fetch is redirected to
  `uepc`. The handler may first advance `uepc`, for example past an ecall
  it has emulated.
* **S-mode.** It asserts `strap_valid` with the cause, the epc and the
  tval. The core's own supervisor trap logic takes the trap.
* **Trusted ecall.** It is not intercepted. `ecall_pass` tells the core to
  treat it as an ordinary system call. This is how the trusted handler
  performs a system call on behalf of a library.

Cause codes (own allocation, even = U level, odd = S level):

| violation | U | S |
|---|---|---|
| jump / branch | 24 | 25 |
| load | 26 | 27 |
| store | 28 | 29 |
| ecall of untrusted code | 30 | 31 |

A DASICS trap does not depend on any user interrupt enable bit. It is a
synchronous exception of the offending instruction.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_MEM` | 16 | memory bound registers, as in the XiangShan prototype |
| `NUM_JUMP` | 4 | jump bound registers, as in the XiangShan prototype |
| `NUM_LOAD`, `NUM_STORE` | 2, 2 | load and store units of the XiangShan memory block |
| `XLEN` | 64 | own choice (RV64 core) |
| `FETCH_WIDTH` | 16 | own choice (instructions per fetch packet) |

The CSR layout limits the counts: `NUM_MEM` ≤ 16, so that the cfg nibbles
fit one 64-bit register and the bounds fit their address window, and
`NUM_JUMP` ≤ 4. The range functions in `dasics_pkg` work on 64-bit values,
so `XLEN` should stay 64.

## Departures and open points

* The original block diagram labels the memory bounds `BoundReg0` to
  `BoundReg16`, which would be 17 registers. The prose says 16, and 16 are
  built.
* The original block diagram also shows a second `BranchChecker` next to
  the reorder buffer, linked to the front-end branch checker. What it does
  is not described, so it is not built. Back-end jump targets are covered
  by `dasics_jump_checker`.
* The following are this design's own choices. The original description
  gives no values for them:
  * the CSR addresses, the cfg bit positions and the cause codes;
  * half-open bounds;
  * checking the last byte of an access as well as the first;
  * whether reads of the CSRs are restricted like writes;
  * the handling of an untrusted `dasicscall.jr`.
* Falling through from untrusted code into the trusted zone without a
  branch or jump (running off the end of a code range) is not checked.
  Only taken branches and jumps are checked.
* There is one trusted-call entry register. A trusted dispatcher at that
  address can serve any number of trusted calls. The original text speaks
  of registering entry points, plural, but gives no count.
* Compressed (2-byte) calls are not supported: the saved return PC is
  always `pc + 4`.
* Of the N extension, only `utvec`, `uscratch`, `uepc`, `ucause`, `utval`
  and `uret` are implemented. `ustatus`, `uie` and `uip` are not.
* Software is not part of this RTL: the exception handler, the trusted-call
  library and the system call checks.

## Simulating

Each module has a self-checking testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=N failures=M`. Give the package first; `-y rtl`
lets verilator find the modules by name:

```
verilator --binary --timing --assert -y rtl rtl/dasics_pkg.sv \
    tb/dasics_top_tb.sv --top-module dasics_top_tb -o sim
./obj_dir/sim
```

For a unit testbench, replace the testbench file and the top module name,
for example `tb/dasics_mem_checker_tb.sv` with
`--top-module dasics_mem_checker_tb`.

* The unit testbenches compare each module with a reference model written
  independently in the testbench. They use directed edge cases (bound
  edges, permission bits, privilege rules) and several thousand random
  cases.
* `dasics_top_tb` runs the whole design at its default size. It plays the
  core and runs three scenarios:
  1. A trusted `main` calls an untrusted `lib_function` that tries to:
     read `main`'s secret stack data, overwrite the saved return address,
     branch and jump into `main`, widen its own bounds, and return to a
     forged address. Each attempt traps to the user handler with the right
     cause. The library's legal accesses, its use of the trusted-call
     entry and its legal return pass.
  2. Untrusted code issues the system calls openat, getdents64 and
     fstatat. Each is intercepted. The handler performs the call itself
     and returns with `uret`.
  3. An S-mode driver outside the kernel's trusted zone faults to the
     supervisor. S-mode cannot move its own zone.

  The testbench counts 17 mechanisms (tags of both kinds, passing and
  faulting loads, stores, branches and jumps, the return-PC capture,
  trusted calls, refused CSR accesses, U- and S-level traps, intercepted
  and passed ecalls, `uret`). A mechanism that never happens fails the
  run. The scenario takes 71 clock cycles.
