# SealPK: sealable protection keys for a RISC-V data MMU

Protection keys let a program split its own address space into *domains* and
change what each domain may do without a system call. Every page carries a
small key. A per-thread register file holds the read and write permission of
each key, and user code updates it with one instruction. Two things limit the
usual form of this idea (16 keys, one 32-bit register). Few domains are
available. And any code that reaches the update instruction, for example
through a control-flow hijack, can open every domain.

SealPK addresses both limits on an Sv39 RISC-V core:

* **1024 keys.** An Sv39 page-table entry has ten reserved bits (63:54). They
  hold the page's key, and the data TLB keeps the key next to the translation.
  The permissions of all 1024 keys live in a 2 Kb on-chip memory, **PKR**.
* **Two permission bits per key, RD (read disable) and WD (write disable).**
  The effective right of a load or store is the page's own R/W ANDed with the
  inverse of the key's bits. This is computed in the same cycle as the normal
  TLB check. Because RISC-V stores only need W, `RD=1, WD=0` gives a
  *write-only* page, which the PTE encoding alone cannot express.
* **Permission sealing.** A key's permission can be *sealed* to one address
  range. After that, the update instruction `WRPKR` on that key works only
  when the instruction itself lies inside the range. Elsewhere it traps. The
  seal is write-once for a process.

This repository holds synthesizable SystemVerilog for the hardware side of the
scheme: the key-carrying DTLB, PKR, the permission logic, the seal state
(SealReg and PK-CAM) and the unit that executes the custom instructions. The
host core, its page-table walker, its caches and the operating-system support
are not included. `sealpk_top` exposes their connections as ports.

## Keys and the PKR memory

PKR has 32 rows of 64 bits. Each row holds 32 keys at 2 bits each:

```
key  k = k[9:5] | k[4:0]
         row      slot          slot s = bits [2s+1 : 2s] of the row
                                bit 2s+1 = RD, bit 2s = WD
```

Worked example. Key `1111000001` selects row 30, slot 1. Suppose that slot
holds `RD WD = 01`. The page is also mapped `R W = 11` in its PTE. The
effective permission is then `R W = 10`: loads pass and stores take a store
page fault. Under this bit order, permission value 1 means read-only and
value 2 means write-only.

`RDPKR rd, rs1` returns the whole row `rs1[9:5]`. `WRPKR rs1, rs2` overwrites
that row with `rs2`. Software therefore updates one key with a
read-modify-write of its row. A shortcut is to write a row value it already
knows. This is the difference between the two shadow-stack variants below
("RD+WR" and "WR only").

The array has no reset. The kernel holds a copy per thread and loads all rows
when it switches to a thread, so software defines the contents before use.

## The data-access path

`sealpk_top` handles a load or store in one combinational pass:

```
vaddr[38:12] --> DTLB (fully assoc.) --hit--> ppn, R, W, key
                                               |      |
                                  key --> PKR check port --> RD, WD
                                               v      v
                                      pkey_perm_check: eff_r = R & ~RD
                                                       eff_w = W & ~WD
                    --> acc_load_fault / acc_store_fault / acc_pkey_fault
```

`acc_pkey_fault` is set when the PTE alone would have allowed the access, so
the key caused the fault. A kernel can use it to report a key violation rather
than an ordinary page fault. A DTLB miss raises `acc_miss`. The walker then
writes the leaf PTE through `fill_en/fill_vpn/fill_pte`, and the key comes
from PTE bits 63:54. `sfence` invalidates the DTLB. Key checks apply only to
data accesses, so the instruction TLB is unchanged and is not part of this
RTL.

## Sealing a key's permission

This is the least obvious part of the design.

### State

* **SealReg** holds 1024 seal bits, 16 rows × 64, with key `k` at bit `k[5:0]`
  of row `k[9:6]`. A set bit means "WRPKR on this key is range-checked".
* **PK-CAM** is a small fully associative cache, 8 entries by default. Each
  entry is `(key, Addr_start, Addr_end)`. A lookup with `(key, PC)` reports:
  * `hit`: `key == entry.key && PC >= Addr_start && PC <= Addr_end`. Both
    ends are inclusive.
  * `pkey_hit`: some valid entry holds this key, whatever the PC.
* **Range latches**. `seal_start` and `seal_end` take no operands. Each one
  records *its own PC* as the start or end of the range. Trusted code
  therefore marks its own extent by placing `seal_start` at its beginning and
  `seal_end` at its end.

### Establishing a seal

1. Trusted code executes `seal_start` ... `seal_end`, which latches the range.
2. Trusted code makes a system call. The kernel executes `PERM_SEAL key`,
   which only supervisor mode may issue. If the key's SealReg bit is clear,
   the unit sets it and inserts `(key, start, end)` into PK-CAM, and `rd`
   returns 1. If the bit is already set, nothing changes and `rd` returns 0.
   A seal cannot be moved or removed by issuing it again.
3. The kernel reads the latched range with `RD_RANGE` and keeps it, because
   PK-CAM is only a cache.

### Executing WRPKR

```
user WRPKR(key, row) at PC
  SealReg[key] == 0 ---------------------------> write row to PKR
  SealReg[key] == 1 -> PK-CAM(key, PC)
                         hit ------------------> write row to PKR
                         pkey_hit, no hit -----> no write, exception EXC_SEAL_VIOL
                         no pkey_hit ----------> no write, response.refill = 1
```

A refill response tells the core to raise an interrupt. The kernel's handler
loads the key's saved range with `SET_RANGE start, end` and inserts it with
`CAM_REFILL key`. When the handler returns, the same WRPKR executes again and
now meets a hit or a violation. An insert for a key that is already cached is
ignored, so a cached range can never be replaced. When PK-CAM is full, inserts
use a round-robin victim.

Supervisor-mode WRPKR skips the seal check. The kernel needs this to clear a
freed key's permission and to restore PKR on a context switch.

### Context switches

Sealing state belongs to a process. `SEALREG_RD row` and `SEALREG_WR row, value`
save and restore SealReg one row at a time. `CAM_FLUSH` empties PK-CAM, and
later refills rebuild it on demand. SealReg bits can be cleared only through
`SEALREG_WR`, which is supervisor-only and meant for this restore.

### A caveat inherited from the scheme

WRPKR rewrites a whole row of 32 keys but checks the seal of only the key
named in `rs1`. Unprivileged code can therefore name an unsealed key in the
same row and overwrite a sealed neighbour's bits. This RTL reproduces that
behaviour faithfully. To avoid it, software should keep sealed keys in rows
without unsealed allocatable keys. Alternatively, the write could be changed
to preserve the slots of sealed keys.

## Custom instructions

All instructions go through one command/response port (`sealpk_cmd_t` in,
`sealpk_resp_t` out). Commands are selected by `funct` (the funct7 of a
custom opcode), and the numbering is this implementation's own. Key operands
are `rs1[9:0]`.

| funct | name          | mode | effect |
|------:|---------------|------|--------|
| 0 | `RDPKR`        | U/S | `rd = PKR[rs1[9:5]]` |
| 1 | `WRPKR`        | U/S | `PKR[rs1[9:5]] = rs2`, sealed keys range-checked in U-mode |
| 2 | `SEAL_START`   | U/S | range start = PC of this instruction |
| 3 | `SEAL_END`     | U/S | range end = PC of this instruction |
| 4 | `PERM_SEAL`    | S   | seal key `rs1` with the latched range; `rd` = 1 if newly sealed |
| 5 | `CAM_REFILL`   | S   | insert `(rs1, refill range)` into PK-CAM |
| 6 | `SET_RANGE`    | S   | refill range = `[rs1, rs2]` |
| 7 | `RD_RANGE`     | S   | `rd` = latched start (`rs1[0]=0`) or end (`rs1[0]=1`) |
| 8 | `SEALREG_RD`   | S   | `rd = SealReg[rs1[3:0]]` |
| 9 | `SEALREG_WR`   | S   | `SealReg[rs1[3:0]] = rs2` |
| 10| `CAM_FLUSH`    | S   | invalidate PK-CAM |

An S-only command from user mode, or an unknown funct, returns
`exc = EXC_ILLEGAL` and changes nothing.

**Timing.** The unit accepts a command when `cmd_valid && cmd_ready`. All state
changes happen at that clock edge. The response is valid from the next cycle
until `resp_ready`, and it holds `rd`, `wb`, `data`, `exc`, `refill` and the
key of a violation or refill. `cmd_ready` drops only while a response waits to
be taken. With `resp_ready` held high, the unit completes one command per
cycle. An assertion checks that a held response stays stable.

## What is hardware and what is not

The scheme also has parts that live in the kernel, and this RTL has no
counterpart for them:

* lazy de-allocation of keys. A freed key that is still on pages is marked
  dirty and is not handed out again until its page count reaches zero. This
  closes the "key use-after-free" hole.
* *domain sealing*: the page-table permissions and key of a domain's pages
  become frozen.
* *page sealing*: no further pages may join a domain.
* saving and restoring PKR, SealReg and the seal ranges per thread or
  process, and decoding key faults in the page-fault handler.

The hardware side gives the kernel what it needs for these: supervisor
access to every structure, and the `acc_pkey_fault` flag.

## Files

| file | contents |
|------|----------|
| `rtl/sealpk_pkg.sv` | widths, the Sv39 PTE struct, the TLB line, command/response structs, funct and exception enums |
| `rtl/pkr.sv` | PKR, 32 × 64, two combinational read ports, one write port |
| `rtl/seal_reg.sv` | SealReg, 16 × 64 flip-flops with reset, set-only seal port plus row save/restore |
| `rtl/pk_cam.sv` | PK-CAM range cache |
| `rtl/dtlb.sv` | fully associative DTLB with a key per line |
| `rtl/pkey_perm_check.sv` | effective-permission and fault logic |
| `rtl/sealpk_cmd_unit.sv` | custom-instruction execution, WRPKR seal flow |
| `rtl/sealpk_top.sv` | everything above wired together |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_shadow_stack.sv` | the shadow-stack use case on `sealpk_top` |

Parameters, with their defaults, are listed below. PKR and SealReg geometry is
fixed by the 10-bit key.

| module | parameter | default |
|--------|-----------|---------|
| `sealpk_top` | `TLB_ENTRIES` | 32 |
| `sealpk_top` | `CAM_ENTRIES` | 8 |
| `sealpk_top` | `ADDR_W` (PC bits compared in PK-CAM) | 40 |
| `pkr` | `ROWS`, `ROW_W` | 32, 64 |
| `seal_reg` | `ROWS`, `ROW_W` | 16, 64 |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and finishes. Each also
has a cycle watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Wno-fatal \
    rtl/sealpk_pkg.sv rtl/*.sv tb/tb_sealpk_top.sv --top-module tb_sealpk_top
./obj_dir/Vtb_sealpk_top
```

To run one block, replace the testbench and top-module names, for example
`tb_pk_cam`. The package must come first on the command line. Every run
takes well under a second. Keep `--assert` on. With it, the RTL's assertions
are checked on every run. They cover a held response that stays stable, no
key cached twice in PK-CAM, and no page held twice in the DTLB.

* `tb_pkr` fills every row and checks every key's slot, and the worked
  example above.
* `tb_pkey_perm_check` tries all 64 input combinations against the rule.
* `tb_seal_reg` checks reset, sticky seals, the row layout (key 0x001 is bit 1
  of row 0), restore, and a seal and restore of the same row in one cycle.
* `tb_pk_cam` checks an entry of key 0x001 with range 0x103b8 to 0x10728 at
  its inclusive ends, the write-once insert and the flush. It also runs
  random traffic against a model.
* `tb_dtlb` checks fills from PTEs (key from bits 63:54), A/D handling,
  round-robin eviction and the flush.
* `tb_sealpk_cmd_unit` plays a complete seal life cycle. It covers RDPKR and
  WRPKR inside and outside the range, refill and re-execution, supervisor
  bypass, illegal use, SealReg save/restore, the one-cycle response and
  back-pressure.
* `tb_sealpk_top` runs at the default sizes. It first replays the worked
  example: a store to page 87 is refused by key `1111000001`. It then uses
  64 pages, 16 keys over several PKR rows, and 12 sealed keys, more than PK-CAM holds. 4000 random
  operations are checked against a reference model. The test counts each
  mechanism (DTLB miss and hit, key load fault, key store fault, PTE fault,
  write-only store, unsealed, in-range and refused WRPKR, refill, illegal
  command, supervisor bypass, sfence, back-pressure, re-seal, RDPKR) and
  fails if any of them never occurs.
* `tb_shadow_stack` runs the shadow-stack use case on `sealpk_top`. One key
  guards the shadow-stack pages, which are read-only except inside function
  prologues. The instrumentation code is the sealed range. A random
  call/return trace of 3000 operations runs twice: once with a
  WR-only prologue, and once with an RD+WR prologue after a context switch
  that flushes PK-CAM. Attacks are mixed in: stores to saved return addresses
  and injected WRPKRs from outside the range. Both must be refused. Each
  prologue must take exactly one cycle per command plus one for the store,
  plus any walker fill or refill. This confirms that the key check adds no
  cycle to the access.

## Fit of the evaluated use case

The evaluated workloads are 6 SPECint2000, 4 SPECint2006 and 7 MiBench
programs. Each is protected by an isolated shadow stack, and each needs one
key and one sealed range. The defaults provide 1024 keys (32 PKR rows), 1024
seal bits and 8 PK-CAM entries, so every workload fits with room to spare.
Up to 1024 domains can exist at once. More than that would need software to
multiplex keys, which is outside this RTL. PK-CAM only caches ranges, so its
size affects how often a refill interrupt occurs, not what can be sealed.

## Departures and choices

The following are not fixed by the scheme and were chosen here:

* The command encoding, the supervisor helper commands (`SET_RANGE`,
  `CAM_REFILL`, `RD_RANGE`, `SEALREG_RD/WR`, `CAM_FLUSH`), the response
  record, and refill by re-executing the instruction.
* Supervisor WRPKR bypasses the seal check.
* The sizes of PK-CAM (8) and the DTLB (32). PK-CAM uses first-free, then
  round-robin replacement. The PC compare is 40 bits wide.
* The DTLB holds 4 KiB pages only and has no ASIDs. A PTE with A clear (or D
  clear, for writes) is stored without that permission. A real core's walker
  would handle superpages and A/D updates.
* Inside a PKR row, slot `s` sits at bits `[2s+1:2s]` with RD above WD.
* SealReg is built from resettable flip-flops. PKR is a memory without reset.
* The seal range is the PC of `seal_start` and `seal_end`, both inclusive.

On an FPGA the original scheme added about 3 000 LUTs and 2 900 flip-flops
to its host core, RoCC custom-instruction support included. Those figures
cover integration logic not present here, so they cannot be compared directly
with this RTL.
