# Hardware address mapping for UPC shared pointers

In a PGAS language such as Unified Parallel C (UPC), a shared array is dealt out
over the threads in blocks. The declaration `shared [4] int a[32]` on 4 threads puts
elements 0-3 on thread 0, elements 4-7 on thread 1, and so on, with elements 16-19
back on thread 0. A *shared pointer* into such an array has three fields:

| field  | meaning |
|--------|---------|
| thread | the thread that owns the element |
| phase  | the element's position inside its block |
| va     | the element's address inside the owner's part of the shared space |

Advancing such a pointer by one element is not an addition. The phase wraps at the
block size, the thread wraps at THREADS, and the address jumps back by a block and
forward by a whole row of blocks. In software each `p++` costs divisions,
remainders and multiplications. Each dereference also needs a table lookup of the
owner's base address and an add. This RTL moves both operations into hardware
beside a CPU pipeline. The design follows *Hardware Support for Address Mapping
in PGAS Languages; a UPC Case Study* (Serres, Kayi, Anbar, El-Ghazawi). That work
added the same operations to an Alpha ISA in simulation and to a Leon3 SPARC core
on an FPGA. The code here is an independent RTL description of the mapping
hardware, not the authors' code.

## The arithmetic

Block size `B`, element size `E` and `THREADS` are restricted to powers of two.
Every division then becomes a shift and every remainder a mask. Incrementing a
pointer `p` by `inc` elements:

```
phinc    = p.phase + inc
thinc    = phinc >> log2(B)              new.phase  = phinc & (B-1)
tsum     = p.thread + thinc
blockinc = tsum >> log2(THREADS)         new.thread = tsum & (THREADS-1)
new.va   = p.va + (((new.phase - p.phase) + (blockinc << log2(B))) << log2(E))
```

All shifts are arithmetic, so a negative increment steps backwards correctly
(floor division). Example with `shared [4] int a[32]` on 4 threads: the pointer
`[thread 0, phase 2, va 0x3f08]` plus 2 is `[thread 1, phase 0, va 0x3f00]`. The
va drops by two elements because thread 1's block starts at the same local
offset as thread 0's.

To access an element, the unit forms the system virtual address
`base[thread] + va + displacement`. The base comes from a per-thread table, and
the sum then goes through the core's normal TLB. If thread 1's segment starts at
`0xff0b_0000_0000`, the pointer above maps to `0xff0b_0000_3f00`.

The incrementer also compares the new thread with the running thread and sets a
2-bit **locality code**:

| code | meaning |
|------|---------|
| 0 | the element is local |
| 1 | same memory controller |
| 2 | reachable with shared loads/stores |
| 3 | another node |

A coprocessor branch can test any set of code values. Compiled code uses this
to call a communication routine for remote data.

## Pointer format

A pointer is 64 bits:

| bits  | field  | width | limit |
|-------|--------|-------|-------|
| 63:48 | phase  | 16 | block sizes up to 2^16 elements |
| 47:40 | thread | 8  | up to 256 threads |
| 39:0  | va     | 40 | 1 TiB per thread |

The published work fixes only the total of 64 bits. This split is a choice of
this design. The instruction format can encode block sizes up to 2^31, and
larger blocks simply do not fit the phase field here. A compiler must keep such
arrays, and any size that is not a power of two, on its software path. The
published compiler does the same for non-power-of-two sizes.

## Instructions

Three 32-bit formats (field positions as published; bits 31:26 hold the opcode):

```
shared load/store    | opcode | RA 25:21 | RB 20:16     | func 15:11 | disp 10:0                          |
increment, immediate | opcode | RA 25:21 | Increm 20:16 | 0 (15)     | Esize 14:10 | Bsize 9:5 | RC 4:0 |
increment, register  | opcode | RA 25:21 | RB 20:16     | 1 (15)     | Esize 14:10 | Bsize 9:5 | RC 4:0 |
```

- **Esize, Bsize, Increm** are log2 values. An immediate increment is therefore
  1, 2, 4, ... elements. A register increment is any signed 64-bit value.
- **Loads/stores:** RA holds the pointer and RB the data. The 11-bit
  displacement is sign-extended and added after translation, which reaches a
  member of a structure.
- **Opcodes:** `0x05` for loads/stores and `0x06` for increments. The published
  design uses "a free opcode" without naming it.
- **func codes:**

| func | operation |
|------|-----------|
| 0..5 | loads: bu, wu, l, q, s, t |
| 8..13 | stores: b, w, l, q, s, t |
| 16 | `set_threads`: THREADS from RA, running thread from RB |
| 17 | `set_base_address`: thread number from RA, base from RB |
| other | illegal |

The func codes and the two set operations' encodings are this design's own.

Loads zero-extend. The float forms move raw 32/64-bit patterns.

## The unit (`pgas_unit`)

`pgas_unit` is one core's PGAS support. In the published FPGA system, four
Leon3 cores each carry one, on a shared AMBA AHB bus with DDR3, Ethernet and a
debug unit. That system and the cores are not part of this RTL. The unit's
side of the core interface is made of plain ports instead.

```
             instr ──► pgas_decoder ──► sptr_regfile (32 x 64 bit, 2R/1W)
                                          │ RA         │ RB
           ID stage ──────────────────────┼────────────┼──── threads_reg, base_lut (write)
                                          ▼            ▼
           S1  sptr_inc stage 1      base_lut read ─► addr_xlate
           S2  sptr_inc stage 2      system address register ──► mem_req_*
                    │ new pointer, locality_cc                      mem_resp_* (load data)
                    ▼                                                  │
           write-back (one port): load data > increment result > register move
```

Each instruction takes one cycle in ID, then one in S1 and one in S2.

- **Increments:** the result is written at the end of S2, two cycles after
  issue. A new increment can issue every cycle, so one pointer is translated per
  cycle, as published. `cc` takes the new locality code at the same time.
  `cc_valid` is low while an increment is in flight.
- **Shared loads/stores:** the base table is read in ID→S1 and the address is
  formed in S1. The request sits on `mem_req_*` in S2 until `mem_req_ready`.
- **Load data:** it returns on `mem_resp_valid` at least one cycle later,
  already aligned by the memory side, in request order. Up to `LDQ_DEPTH`
  loads may wait for data, so shared loads issue back to back like ordinary
  loads.

### Interlocks and ordering

The published description says only that coprocessor execution is kept in step
with the main pipeline. Everything in this section is this design's choice:

- An instruction waits in ID if a register it reads or writes is the
  destination of an increment in S1 or S2, or of a load still waiting for data.
  There is no forwarding, so a dependent increment issues three cycles after
  its producer.
- Pending loads are held in a small in-order queue (`LDQ_DEPTH` entries). A
  load waits in ID only when that many loads are already in flight.
- There is one register write port. If load data and an increment result arrive
  in the same cycle, the load writes first and the whole pipeline holds for one
  cycle.
- The register move port (`mv_*`) is taken only when nothing is in flight. It
  stands in for the coprocessor register loads of the SPARC prototype (LDC).
  Their encoding is not published.
- `wb_valid/wb_idx/wb_data` show every register write, for the host and for
  debugging.

### Parameters of `pgas_unit`

| parameter | default | meaning |
|-----------|---------|---------|
| `MAX_THREADS` | 64 | base-table entries; the largest published system has 64 cores |
| `ADDR_W` | 64 | system virtual address width |
| `THREADS_PER_MC` | 4 | threads per memory controller, for code 1 |
| `THREADS_PER_NODE` | 4 | threads per node, for code 2 |
| `LDQ_DEPTH` | 4 | loads that may wait for data (this design's choice) |

The defaults describe the 4-core FPGA system, where one DDR3 controller serves
all threads, so codes 2 and 3 cannot occur there. The grouping rule is this
design's: consecutive, power-of-two-sized groups of thread numbers.

## Files

| file | block |
|------|-------|
| `rtl/pgas_pkg.sv` | pointer struct, decoded-instruction struct, operation and size enums, func codes |
| `rtl/sptr_inc.sv` | two-stage pointer incrementer |
| `rtl/base_lut.sv` | per-thread base address table, synchronous read |
| `rtl/addr_xlate.sv` | base + va + displacement |
| `rtl/locality_cc.sv` | locality code |
| `rtl/cb_eval.sv` | branch decision from the 4-bit condition (SPARC V8 CBccc encoding: CBN, CB123, CB12, ..., CB012) |
| `rtl/sptr_regfile.sv` | 32 x 64-bit pointer registers, two reads, one write |
| `rtl/threads_reg.sv` | THREADS and running-thread register, log2 and power-of-two check |
| `rtl/pgas_decoder.sv` | instruction decoder |
| `rtl/pgas_unit.sv` | the unit (top) |

Each file opens with a description of its function, interface and timing. The
description says which parts follow the published design and which are choices
made here.

## Simulation

Every block has a self-checking testbench in `tb/`. Each compares the block
with a model written independently of it: divisions and remainders for the
incrementer, the UPC layout rule for addresses, mnemonic strings for branch
conditions. Each prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl rtl/pgas_pkg.sv rtl/*.sv tb/tb_pgas_unit.sv \
          --top-module tb_pgas_unit -Mdir obj && ./obj/Vtb_pgas_unit
```

(`-Wno-fatal` may be needed with `-Wall`.) The three system-level testbenches use
the unit as the host core would, with a memory model that applies random
back-pressure and random load latency:

- **`tb_pgas_unit`** runs at the default parameters. It computes
  `c[i] = a[i] + b[i]` over 64-element `shared [4] int` arrays on 4 threads. It
  checks:
  - every register write and every element of `c`;
  - the two-cycle increment latency, with one increment issued per cycle;
  - four independent shared loads issued on consecutive cycles;
  - the locality code and branch decision after each increment;
  - that each mechanism happens at least once: interlock stall, write-port
    conflict, memory back-pressure, overlapping loads, thread wrap-around, codes 0 and 1, an
    illegal word, and a THREADS value that is not a power of two.
- **`tb_vadd_threads`** runs one vector-addition program, unchanged, at
  THREADS = 1, 2 and 4, with the count set at run time. This is what the
  run-time THREADS register is for. Every UPC thread walks all elements with
  the pointer increment and uses the CB0 branch to keep the ones it owns,
  as a compiled `upc_forall` does. The test checks that:
  - each branch decision is right;
  - every access stays in the running thread's own segment;
  - each thread handles N/THREADS elements;
  - the result is correct for each count.
- **`tb_matmul`** multiplies two 16x16 `shared [16] int` matrices on 8 threads,
  with two threads per memory controller and four per node. It walks rows with
  +1 increments and columns with +16 increments, alternating immediate and
  register forms. It switches the running thread per row with `set_threads`,
  and requires all four locality codes to occur.

## How far it follows the published design

Follows the published design:

- the increment algorithm and its power-of-two restriction;
- two pipeline stages with one translation per cycle;
- translation by table lookup plus add, and the short displacement;
- the four locality codes and branching on any combination of them;
- a 64-bit pointer register file with two reads and one write;
- a run-time THREADS register;
- the instruction field layout and the set of load, store, increment and
  initialisation instructions.

Departs from it or fills a gap:

- **Register file and format mixed from the two prototypes.** The Alpha version
  keeps pointers in the integer registers. The SPARC version has a separate
  register file but its instruction encodings are not published. This RTL uses
  the separate register file, addressed with the published Alpha-style format.
- **Choices of this design:**
  - opcode values, func codes and the set-instruction encodings;
  - the pointer field split;
  - the register count;
  - how threads are grouped for the locality code;
  - carrying the running thread's number in `set_threads`;
  - the issue, memory and register-move handshakes;
  - the interlocks;
  - negative increments;
  - sign-extension of the displacement.
- **Register file read.** The published register file is built from block RAM,
  which reads synchronously. This one reads combinationally, and the base
  table reads synchronously.
- **Loads.** The memory port must answer loads in order. Up to four may be in
  flight. The published loads run "as fast as normal loads" on a core with a
  one-cycle data cache, and a memory side that answers in one cycle gives one
  shared load per cycle here too.
- **Fig. 2 value.** One value in the published layout figure (the pointer after
  `ptrA + 1`, shown with va 0x3f0b) disagrees with the published algorithm for
  4-byte ints, which gives 0x3f0c. The tests follow the algorithm.
- **Not included:**
  - the host cores (Leon3 SPARC, Alpha), their caches and TLB;
  - the AMBA bus, the DDR3 controller, Ethernet and the debug unit;
  - the compiler support that emits these instructions.
