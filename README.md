# Conditional capabilities for CHERI-RISC-V: execute-stage RTL

Memory that a program has allocated but not yet written holds whatever was
there before: old pointers, keys, anything. Reading it is undefined behaviour
in C and a steady source of information leaks. CHERI already attaches bounds
and permissions to every pointer, but a CHERI capability that may be read may
be read anywhere inside its bounds, written or not.

This design adds a *conditional permission* to a CHERI capability: a
permission that is granted only for memory on which some other operation has
already happened. The main case is **Write-before-Read**: a freshly allocated
object is handed out through a capability that may be written anywhere in its
bounds but read only where it has been written. The hardware tracks "where it
has been written" with one extra address per capability, the *operation top*
`o`. The region `[base, o)` is initialised; `[o, top)` is not. A store that
reaches `o` pushes it forward by the size of the store; a load must lie
entirely below `o` or it raises a CHERI exception. When `o` reaches `top` the
capability behaves like an ordinary one.

The operation top costs no extra storage: it is squeezed into the top 16 bits
of the 64-bit address field, which 48-bit (or 32-bit) operating systems do not
use. The RTL here covers what a CHERI-RISC-V core needs to gain for this:
decoding and re-encoding the operation top, the `CSetOpBounds` instructions
that create conditional capabilities, the load/store/fetch checks, the
writeback of the advanced bound into the register that holds the capability,
and the bypass that keeps back-to-back accesses through the same register
correct without a stall. The rest of the core (fetch, decode of other
instructions, ALU, CSRs, caches) is outside it and meets it at ports.

## The conditional permissions

The 4-bit field `p_op` (the bits CHERI leaves to software-defined permissions)
holds one of these states; 0 means "no conditional permission" and the
capability behaves exactly as in CHERI. States 8 to 15 are unused; a
capability carrying one has its address masked to 48 bits like any
conditional capability, but no rule applies to it.

| `p_op` | permission | instruction | load | store | fetch |
|---|---|---|---|---|---|
| 1 | Write-before-Read | `csetwbrbound` | must be below `o` | advances `o` | – |
| 2 | Write-before-Execute | `csetwbxbound` | – | advances `o` | must be below `o` |
| 3 | Write-before-Read-Only | `csetrobound` | must be below `o` | must be at/above `o`; advances `o` | – |
| 4 | Write-before-Execute-Only | `csetxobound` | – | must be at/above `o`; advances `o` | must be below `o` |
| 5 | Write-Once | `csetwtbound` | – | must be at/above `o`; advances `o` | – |
| 6 | Read-Once | `csetrtbound` | must be at/above `o`; advances `o` | advances `o` | – |
| 7 | Execute-Once | `csetxtbound` | – | – | must be at/above `o`; advances `o` |

"Below `o`" means the whole access `[addr, addr+size)` lies in `[base, o)`.
"At/above `o`" means `addr >= o`. "Advances" means: if the access covers `o`
(`addr <= o < addr+size`) then `o` becomes `addr+size`. An access that starts
beyond `o` does not move it, so the bound describes memory written
sequentially from the base; structures filled field by field out of order, or
with padding, will see false violations. The rules are one table,
`cp_rule()` in `rtl/moncheri_pkg.sv`; changing a row there changes all
checkers.

Conditional and conventional checks run side by side. An access must pass the
ordinary CHERI checks (tag, not sealed, Load/Store/Execute permission, inside
`[base, top)`) *and* the operation-bound rule.

## Where the operation top lives

A 128-bit capability is two 64-bit words. The upper word is the CHERI ISAv9
layout with the software-permission bits reused as `p_op`:

```
 63   60 59     48  47  46 45 44      27  26  25    17 16  14 13    3 2   0
+-------+---------+---+-----+----------+----+--------+-----+-------+-----+
| p_op  |  p_hw   | f | res |  otype   | IE | T[11:3]| T_E |B[13:3]| B_E |
+-------+---------+---+-----+----------+----+--------+-----+-------+-----+
```

The lower word (the cursor) is the plain 64-bit address for a conventional
capability. For a conditional capability (`p_op != 0`) it is

```
 63        53 52    48 47                                   0
+------------+--------+--------------------------------------+
|  O[13:3]   |  O_E   |            address a[47:0]           |
+------------+--------+--------------------------------------+
```

so the address is masked to 48 bits whenever a register holds a conditional
capability, and only then.

### Decoding (rtl/cap_decode.sv)

Base and top are stored as 14-bit mantissas `B`, `T` (CHERI Concentrate,
mantissa width 14):

* `IE = 0`: exponent `E = 0`, `B[2:0] = B_E`, `T[2:0] = T_E`,
  `L_carry = (T[11:0] < B[11:0])`, `L_msb = 0`.
* `IE = 1`: `E = {T_E, B_E}` (at most 52), `B[2:0] = T[2:0] = 0`,
  `L_carry = (T[11:3] < B[11:3])`, `L_msb = 1`.
* `T[13:12] = B[13:12] + L_carry + L_msb`.

The operation top uses the same scheme with its own mantissa `O`:

* `IE = 0`: `O[2:0] = O_E[4:2]`; no bits below the mantissa.
* `IE = 1`: `O[2:0] = O_E[E+2:E]` and the `E` bits below the mantissa are
  `O_E[E-1:0]`. Five bits of `O_E` therefore allow `E <= 2` only: the
  operation top keeps byte precision, and capabilities with a larger
  exponent (objects larger than roughly 32 KiB) cannot carry one.

Each bound `x` (base, top, operation top) is rebuilt from the address as

```
x = ((a[AW-1 : E+14] + c_x) << (E+14)) | (X[13:0] << E) | low_bits
```

with `AW = 48` for a conditional capability and 64 otherwise. The correction
`c_x` compares `A3 = a[E+13:E+11]` and `X3 = X[13:11]` with `R = B[13:11] - 1`
(3-bit arithmetic): `c_x = 0` if both or neither are below `R`, `+1` if only
`X3` is, `-1` if only `A3` is. This is what lets the address wander outside
the object while the bounds still decode correctly, and the operation top
needs its own `c_o` for the same reason. For conventional capabilities the
CHERI ISAv9 fix-up of `top[64]` is applied; for conditional ones base is cut
to 48 bits and top and operation top to 49 (top may equal 2^48).

### Encoding (rtl/opbound_encode.sv)

Writing a new operation top `o` is cheap because the exponent does not change:
`O = o[E+13:E]`, stored as `O[13:3]` and, for `IE = 0`, `O_E = {O[2:0], 00}`,
for `IE = 1`, `O_E = o[E+2:0]`. The upper address bits are not stored; the
decoder's `c_o` recovers them. Every `o` between base and top round-trips.

## Creating a conditional capability: CSetOpBounds

`csetXXbound cd, cs1, rs2` turns `cs1` into a conditional capability with
permission `XX` and operation bound `[base, base + rs2]`. An allocator calls it
with length 0 on the pointer it returns, so the whole object starts
unreadable. Encoding (this design's choice; any free slot would do): opcode
custom-2 (`0x5B`), R-type, `funct3 = 0`, `funct7 = 0x28 + p_op - 1`.

It raises an exception, in this order, when `cs1` is untagged (tag violation),
sealed (seal violation), has `IE = 1` with `E > 2`, is conventional with
address bits above 47 set or a top beyond 2^48 (length violation), when
`base + length > top` (length violation), or when `cs1` is already conditional
and the new bound would grow or the permission would change (operation-bound
violation, cause `0x1C`). Shrinking an existing bound is allowed. The
permission states never confer more than the capability's own `p_hw` bits:
they only withhold access.

## The pipeline (rtl/moncheri_exec.sv)

```
            S1 (ALU stage)                 S2 (memory stage)          S3 (writeback)
 in_instr ─► operands (with bypass) ──────► cap_check (bounds/perm) ──► rd  <- load data / CSetOpBounds
   decode    cap_decode of rs1             raise any exception          rs1 <- capability with new o
             opbound_check (rule, advance?) dmem request
             csetopbounds_unit             opbound_encode (new o)
             pcc_opbound_check (fetch)            │                         │
                   ▲                              │                         │
                   └──────── bypass: S2 and S3 results, including the ◄─────┘
                             base capability with its advanced bound
```

* **S1** reads `rs1`/`rs2`, decodes the base capability, forms the address
  (`a[47:0] + imm` for a conditional capability), and decides from the rule
  table whether the access violates the operation bound and whether it will
  advance it. `CSetOpBounds` is evaluated here, and the instruction's own
  fetch is checked against the PCC, including the execute rules of
  Write-before-Execute(-Only) and Execute-Once.
* **S2** finishes the conventional bounds and permission check and raises the
  exception for any violation found in S1 or S2 (priority: fetch, illegal,
  conventional, misaligned, operation bound). Otherwise it issues the memory
  request and re-encodes the base capability with the advanced operation top.
* **S3** writes the destination register and, separately, writes the updated
  base capability back to `rs1` (when both name the same register the
  destination wins).

**Why the bypass matters.** A store through a conditional capability changes
the *source* register `rs1`, which ordinary pipelines never do. In

```
csetwbrbound ca0, ca0, zero   # ca0: writable, nothing readable
csw          a1, 0(ca0)       # advances o to base+4 in S2
clw          a0, 0(ca0)       # in S1 at the same time: needs the new o
```

the load would see the old bound in the register file and fault. Every S1
operand is therefore forwarded from S2 (the capability re-encoded there) and
from S3, with S2 taking precedence. The sequence runs at one instruction per
cycle; the only stall in the block is one cycle for an instruction that uses
the destination of the load in front of it.

**Timing.** One instruction enters per cycle. An instruction accepted at
clock edge *n* is in S1 during cycle *n+1*, makes its memory request in cycle
*n+2* and is written back (and shown on `retire_*`) in cycle *n+3*. Memory
answers a request on `dmem_rdata` in the following cycle. An exception shows
on `trap_*` for one cycle while the faulting instruction is in S2; it is
dropped, the younger instruction in S1 is flushed and `in_ready` is low in
that cycle, and the supplier continues at whatever PC its handler chooses.
For Execute-Once the PCC's bound advances as each instruction leaves S1.

### Ports of moncheri_exec

| port | dir | meaning |
|---|---|---|
| `in_valid`, `in_ready`, `in_instr[31:0]`, `in_pc[63:0]` | in/out | instruction supply; held stable while `in_ready` is low |
| `ext_wr_valid`, `ext_wr_idx`, `ext_wr_data` | in | register writes by the rest of the core, only while this block is empty |
| `pcc_wr_valid`, `pcc_wr_data` | in | load the PCC (jumps in a complete core) |
| `dmem_req_valid/we/addr/be/wdata` | out | one request per cycle, doubleword-aligned address with byte enables |
| `dmem_rdata[63:0]` | in | read data of the previous cycle's request |
| `trap_valid`, `trap_cause`, `trap_pc` | out | exception raised in S2 |
| `retire_valid`, `retire_pc` | out | instruction written back |
| `pcc_out` | out | current PCC |
| `events` | out | per-cycle flags: S2/S3 bypass, bypass carrying a bound update, load-use stall, bound writeback, PCC bound advance, trap |

Capabilities on the ports are `tcap_t` (tag + 128 bits) from
`rtl/moncheri_pkg.sv`; an integer register value is a `tcap_t` with tag 0 and
the value in the cursor.

Exception causes: CHERI ISAv9 codes where one exists (length 0x01, tag 0x02,
seal 0x03, permit-execute 0x11, permit-load 0x12, permit-store 0x13); this
design adds operation bound 0x1C, illegal-here 0x1D and misaligned 0x1E.

## Modules

| file | role |
|---|---|
| `moncheri_pkg.sv` | capability struct, bounds struct, `p_op` states, rule table, causes, micro-op |
| `cap_decode.sv` | base / top / operation-top decoder |
| `opbound_encode.sv` | writes a new operation top into the cursor |
| `csetopbounds_unit.sv` | the CSetOpBounds family |
| `opbound_check.sv` | S1 load/store rule check and bound advance |
| `cap_check.sv` | conventional tag / seal / permission / bounds check |
| `pcc_opbound_check.sv` | fetch check against the PCC and its operation bound |
| `cc_decode.sv` | decodes loads, stores and CSetOpBounds |
| `cap_regfile.sv` | 32 × 129-bit merged register file, 2 read / 3 write ports |
| `moncheri_exec.sv` | the top: S1–S3 with bypass, stall and trap |

All of it is combinational except the register file and the pipeline
registers of the top; the top has no parameters.

## Simulating

Each module has a self-checking testbench `tb/<module>_tb.sv` that ends with a
`TB_RESULT checks=N failures=M` line. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
  rtl/moncheri_pkg.sv tb/moncheri_tb_pkg.sv tb/moncheri_exec_tb.sv \
  --top-module moncheri_exec_tb -o sim
./obj_dir/sim
```

`tb/moncheri_tb_pkg.sv` builds compressed capabilities straight from the
numbers they should decode to (`mk_cap`), independently of the RTL encoder,
and is what the unit testbenches check against. `moncheri_exec_tb` runs the
whole block with a memory model: the three-instruction hazard sequence above,
an uninitialised read, the S3 bypass, a load-use stall, the Write-Once,
Write-before-Read-Only, Read-Once, Write-before-Execute and Execute-Once
rules, conventional violations and refused `CSetOpBounds`, and finally a
256-element `int` array written and read back through a Write-before-Read
capability (513 instructions in 515 cycles, no stall). It fails if any of the
bypass, stall, bound-update, PCC-update or trap mechanisms never occurs.
Two more testbenches run the evaluation workloads on the top block:

* `tlsf_chunks_tb`: a 1 MiB heap handed out in equal chunks, once per chunk
  size from 32 B to 4 KiB. Each chunk is made Write-before-Read, filled,
  and read back, about 2.1 million instructions in all, at one per cycle.
  Because the heap is reused, each round starts on stale data, and its first
  premature read must trap.
* `juliet_cwe457_tb`: two use-of-uninitialised-variable test cases, compiled
  by hand to instructions. One is a double read through a pointer; the other
  is a 10-element array of which only half is written. Each runs in a "bad"
  and a "good" variant, and every uninitialised read traps.

## How far to trust it, and where it departs

Tested: every module against independent reference computations (tens of
thousands of random cases for the decoder, encoder and checkers), and the
top end to end. Each testbench has also been shown to fail on a deliberately
broken copy of its module. Not done: synthesis timing, formal proof, or a run
inside a complete core.

Decisions that go beyond the published description:

* Seven conditional permissions are implemented (the table above). The
  published text also says five states are used and ten unused; the seven
  listed in its instruction table were followed.
* The Read-Once store column (store advances `o`) is taken literally from
  that table, although its purpose is unclear.
* Stores that start beyond `o` are allowed and do not advance it.
* `CSetOpBounds` encoding, the cause code 0x1C, refusing a permission change,
  and trapping (rather than clearing the tag) on a refused request are this
  design's choices.
* The core around the block is reduced to what is needed to exercise it: only
  loads, stores and `CSetOpBounds` are decoded, other register writes arrive on
  `ext_wr_*`, the PCC is loaded on `pcc_wr_*`, memory has a fixed one-cycle
  latency, misaligned accesses trap, compressed (16-bit) instructions are not
  checked, and capability loads/stores (`clc`/`csc`) with their tag memory
  are not included.
* Loading capabilities whose exponent is above 2 and that carry `p_op != 0`
  (which `CSetOpBounds` never creates) fault on any access their permission
  conditions.
* Not built: the proposed variant in which a load from unwritten memory
  returns zero instead of trapping, the bitmap form of the operation top for
  non-sequential writes, and the compiler and allocator support that decides
  which capabilities get a conditional permission.
