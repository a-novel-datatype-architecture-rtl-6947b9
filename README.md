# TYPELINE: a datatype-partitioned execution unit

Most programs spend their arithmetic on a handful of datatypes. TYPELINE gives
each of the four most frequent C++ datatypes its own **process line**: a
register file holding only that type, followed by a **type execution unit
(TEU)** that implements only that type's operations. The four lines are
integer, float, double and char. A compiler assigns each operation to the line
of its result type. Operations on different types, which rarely depend on each
other, can then run on separate lines at the same time. A short cluster of
same-type loads can fill a register file in one cycle. Whatever the lines
cannot do (pointers, odd types, unsupported operations) goes back to an
ordinary host processor.

This RTL implements the unit described in "A novel datatype architecture
support for programming languages" (Alidoost Nia, Ebrahimi Atani). The paper
gives the architecture at block level: four lines, 32 registers per file, 1 to
16 lanes in array mode, a type conversion unit with eight control bits, an
instruction list and one worked example. It does not give encodings, widths,
number formats, timing or interfaces. Each of these is chosen here, and every
choice is listed at the end of this document and in the opening comment of
the file concerned.

```
            instr (from host)                 reject (back to host)
                  |                                  ^
          +-------v----------------------------------+-------+
          |  typeline_issue: control state, clusters, dispatch |
          +--+-----------+-------------+-------------+-----+---+
             | load ctl  | vector mode | 8 conv bits | op  |  mem port, OBJ.n/r
   +---------v--+        |             |             |     |
   | RF1 int  32|==A,B===+=====+       |             |     +--> obj_mem_mgr
   | RF2 float32|==A,B=========|=+  +--v-----------+ |
   | RF3 double |==A,B=========|=|==| type_conv_   |=v=> TEU1 int
   | RF4 char  8|==A,B=========|=|==| unit         |===> TEU2 float (DIV)
   |   (port C  |--------------+ |  | i->f i->d f->d|==> TEU3 double
   |  to conv.) |----------------+  +--------------+===> TEU4 char
   +-----^------+                                         |
         +------------- results (write-back) -------------+
```

## The four process lines

| line | TEU | register | operations |
|---|---|---|---|
| 1 integer | `teu_int` | 32-bit two's complement | MOV ADD SUB MUL DIV, CMPE CMPEG CMPES CMPS, AND OR XOR NOR XNOR, SRA SRL |
| 2 float | `teu_fp` (8/23, with divider) | IEEE binary32 | MOV ADD SUB MUL DIV CMP |
| 3 double | `teu_fp` (11/52, no divider) | IEEE binary64 | MOV ADD SUB MUL CMP |
| 4 char | `teu_char` | 8-bit unsigned | MOV ADD SUB, CMPE CMPEG CMPES CMPS, AND OR XOR NOR XNOR |

LD and ST exist for every line. The operation lists are the paper's. Their
meaning is this design's:

- CMPE is ==, CMPEG is >=, CMPES is <= and CMPS is <. Each writes 1 or 0.
  Integer compares are signed; char compares are unsigned.
- CMP on float and double is a three-way compare. It writes -1.0, +0.0 or
  +1.0 in the line's own format, or a quiet NaN if either operand is NaN.
- The shift amount is the low 5 bits of operand b.
- Integer DIV truncates toward zero. Division by zero gives all ones.
  MIN_INT / -1 wraps to MIN_INT.

The floating-point units round to nearest, ties to even. Subnormal inputs and
results are flushed to zero, and overflow gives infinity.

Every TEU has 16 lanes. In single mode only lane 0 is enabled. In array mode
lanes 0 to `vlen-1` work on consecutive registers: `rd+i <- ra+i op rb+i`,
with register numbers wrapping modulo 32. An immediate operand b is copied
to every lane.

**Latencies** are counted from the cycle a TEU is started to the cycle its
result is written back:

| operation | cycles |
|---|---|
| all except DIV | 1 |
| DIV.ft | 29 (one quotient bit per cycle, 26 bits) |
| DIV.in | 35 |

## Instructions

The paper names mnemonics only. Here an instruction is the packed record
`typeline_pkg::instr_t`, which the host's decoder is assumed to produce:

| field | meaning |
|---|---|
| `op` | mnemonic without suffix (`OP_ADD`, `OP_VEN`, `OP_OBJN`, ...) |
| `line` | datatype suffix: `.in`, `.ft`, `.db` or `.ch` |
| `rd`, `ra`, `rb` | register numbers in the line's file |
| `ra_line` | the line whose register file holds `ra` |
| `use_imm` | operand b comes from `imm` instead of `rb` |
| `mem` | for LD, load from memory instead of loading `imm` |
| `imm` | 64-bit immediate |

Semantics of the instructions that are not plain TEU operations:

| instruction | effect |
|---|---|
| `LD rd, imm` (mem=0) | load the raw bit pattern `imm` |
| `LD rd, [Ira + imm]` (mem=1) | load from memory at integer register `ra` + `imm` (64-bit words) |
| `ST rd, [Ira + imm]` | store `rd` of the line to memory |
| `VEN` | `imm[3:0]` is a line mask (0 means all lines); `imm[8:4]` is the vector length (0, or anything above 16, means 16). Sets array mode on those lines. |
| `VDS` | clears array mode on the lines of mask `imm[3:0]` |
| `PEN`, `PDS` | enter or leave parallel mode |
| `FTEN` `DBEN` `CHEN` / `FTDS` `DBDS` `CHDS` | enable or disable the float, double and char lines. The integer line cannot be disabled. |
| `CONV` | `imm[7:0]` becomes the conversion control byte |
| `OBJ.n rd` | allocate an object; integer register `rd` receives its handle |
| `OBJ.r ra` | release the object whose handle is in integer register `ra` |

`typeline_pkg::op_supported` holds the table of which operation each line
accepts. `conv_allowed` holds the rule for taking an operand from another
line.

## Clusters: how parallelism arises

This is the part of the design that needs the most care. The unit executes
strictly in order. Its speed-up comes from two kinds of cluster that
`typeline_issue` forms from consecutive instructions.

**Load clusters.** A line in array mode may receive consecutive immediate
loads (`LD` with mem=0). These are not written one by one. They are collected,
with their target register numbers, and written into the register file in a
single cycle: the write port has a separate index for each of its 16 lanes. A
load cluster ends when any of these happens:

- an instruction arrives that cannot join it;
- 16 loads have been collected;
- the host offers nothing in a cycle.

Loads from memory are never merged: the memory port moves one word at a time.

**Operation clusters.** In parallel mode (after `PEN`), consecutive TEU
operations for *different* lines are collected, at most one per line and so
at most four in all. The cluster is then started on all its lines in the same
cycle. A `CONV` inside the cluster joins it and costs one cycle before the
start. The cluster ends, and executes, when any of these happens:

- an operation for a line already in it arrives (that operation opens the
  next cluster);
- a non-TEU instruction arrives (for example `PDS`);
- two members would need the same conversion port;
- the host idles.

The cluster's duration is the longest TEU latency among its members, plus
one cycle for a `CONV`. `last_cluster_cycles` reports this number. Outside
parallel mode, every TEU operation is a cluster of one.

Operands are read from the register files on the start cycle, and results are
written back as each TEU finishes. Members of a cluster therefore see each
other's *old* register values. Keeping dependent operations out of one cluster
is the compiler's job, as in the paper: the hardware does not check for it.

The paper's worked example, which the end-to-end test replays, goes:

```
VEN                        ; array mode on all lines
LD.in I0,4 / I1,8 / I2,19 / I3,0    -> one register-file write, 4 lanes
VDS
LD.ft f0,0
PEN
ADD.in I2, I1, I0          ; integer line
CONV 80H                   ; allow int -> float (bit 7), +1 cycle
DIV.ft f0, I3, #3.0        ; float line, operand a read from the int file
PDS                        ; closes the cluster: 1 + 29 = 30 cycles
```

The test loads 21 instead of 0 into I3, so that the division has a
non-zero quotient to check (21 / 3.0 = 7.0).

## Type conversion unit

The float and double TEUs take operand a through `type_conv_unit`. When
`ra_line` names another line, the operand is read through that line's third
read port (port C) and converted on all lanes. Three conversions exist, each
enabled by one bit of the conversion byte:

| bit | conversion | rounding |
|---|---|---|
| 7 | int to float | round to nearest even |
| 6 | int to double | exact |
| 5 | float to double | exact |

Bits 4 to 0 are reserved. An instruction whose source needs a conversion that
is disabled or does not exist is not executed. It is handed back to the host.

## Handing work back to the host

An instruction is returned to the host on `reject_valid`/`reject_instr`, in
the cycle it is accepted, if any of these holds:

- its line does not support the operation (for example `MUL.ch` or `DIV.db`);
- its line is disabled;
- it needs a forbidden conversion.

This is the paper's "traditional" process line: the host's own execution
units run such work. Any open cluster is executed before the rejection, so
the two sides see the instructions in program order.

## Object memory (OBJ.n / OBJ.r)

`obj_mem_mgr` manages a heap region: `NOBJ` = 64 slots of `SLOT_WORDS` = 16
words each, starting at `HEAP_BASE` = 0x10000. It keeps a bitmap of used
slots.

- `OBJ.n` takes the lowest free slot and returns `HEAP_BASE + slot*SLOT_WORDS`.
  When every slot is used it returns 0 and raises `obj_full`.
- `OBJ.r` frees the slot it is given. A handle that is not the base of a used
  slot is ignored, and `obj_bad_release` pulses.

Both complete in one cycle. The paper only states what the two instructions
are for. The fixed-slot allocator is the simplest mechanism that provides
them.

## Interface of `typeline`

| port | dir | meaning |
|---|---|---|
| `instr_valid`, `instr`, `instr_ready` | in, in, out | host offers one instruction per cycle. It must hold the instruction until `instr_ready` (an assertion checks this). |
| `reject_valid`, `reject_instr` | out | instruction for the host to execute itself |
| `mem_req`, `mem_we`, `mem_addr`, `mem_wdata` | out | word-addressed 64-bit memory request, held until `mem_gnt` |
| `mem_gnt`, `mem_rvalid`, `mem_rdata` | in | grant; load data, any number of cycles after the grant |
| `busy` | out | a cluster or memory access is open |
| `vec_mode`, `vlen`, `line_en`, `par_mode`, `conv` | out | control state |
| `last_cluster_cycles` | out | duration of the last operation cluster |
| `obj_full`, `obj_bad_release`, `obj_in_use` | out | object memory status |
| `perf` | out | event counters (`typeline_pkg::perf_t`): clusters, merged loads, CONV cycles, vector operations, memory operations and stalls, object operations, rejects, issue stalls |

Clock `clk` and active-low asynchronous reset `rst_n` are shared by all
blocks. Reset state:

- all registers are zero;
- every line is enabled;
- every line is in single mode, with vector length 16;
- parallel mode is off;
- all conversions are disabled.

## Files

| file | content |
|---|---|
| `rtl/typeline_pkg.sv` | line and operation enums, `instr_t`, `perf_t`, decode tables |
| `rtl/typeline.sv` | top level |
| `rtl/typeline_issue.sv` | intake, control state, clusters, dispatch, memory and object sequencing |
| `rtl/type_regfile.sv` | register file: 3 vector read ports, 16-lane write port |
| `rtl/type_conv_unit.sv` | conversion unit; uses `int2fp.sv` and `fp_widen.sv` |
| `rtl/teu_int.sv` | integer TEU; uses `int_div_iter.sv` |
| `rtl/teu_fp.sv` | float/double TEU; uses `fp_add.sv`, `fp_mul.sv` and `fp_div_iter.sv` |
| `rtl/teu_char.sv` | char TEU |
| `rtl/obj_mem_mgr.sv` | object allocator |
| `tb/tb_*.sv` | one self-checking testbench per block; `tb_typeline` runs the whole unit at its default sizes |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if it hangs. To build and run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/typeline_pkg.sv tb/tb_typeline.sv \
          --top-module tb_typeline -o sim && ./obj_dir/sim
```

Replace `tb_typeline` by `tb_teu_fp`, `tb_teu_int`, `tb_teu_char`,
`tb_type_regfile`, `tb_type_conv_unit`, `tb_obj_mem_mgr` or
`tb_typeline_issue` to test the other blocks.

What each testbench checks:

- **TEUs and conversion unit:** random operands against the simulator's own
  integer and IEEE double arithmetic. For binary32, the exact result is
  rounded once from double, which cannot double-round for +, -, * and /.
  The latencies are checked too.
- **Issue unit:** run with behavioural TEUs; checks the cluster rules and
  cycle counts.
- **End-to-end test (`tb_typeline`):**
  - the worked example above, including the 1 + DIV.ft cycle count;
  - array arithmetic on 8 lanes;
  - a four-line parallel cluster, and a cluster split by a second operation
    for the same line;
  - each conversion, and rejections;
  - loads and stores against a memory model that stalls at random;
  - filling and freeing the heap.

  It fails if any of these mechanisms never occurs. It builds in about half a
  minute and runs in well under a second.

## Choices made here, and departures from the paper

- **Division.** The paper says division is left out of the TEUs for area
  ("handled classically"). Its instruction table still lists DIV.in and
  DIV.ft, and its worked example runs DIV.ft on the float line. This design
  follows the table: the integer and float TEUs have iterative dividers, and
  double has none (none is listed).
- **Widths and formats.** The paper gives none. Here: int 32 bits, float
  and double IEEE-754, char 8 bits, data path 64 bits. Floating point uses
  round-to-nearest-even with flush-to-zero.
- **Conversion bits.** Bit 7 = int to float is taken from the example's
  `CONV 80H`. Bits 6 and 5 are this design's choice. The paper suggests
  using the five reserved converters to spread a large array over other
  lines, but does not say how, so they are not implemented. Only operand a
  is converted.
- **Same-type clusters.** The paper also allows a parallel cluster whose
  members all have the same type. With one TEU per line such operations
  cannot start together, so they close the cluster. Array mode is how
  same-type work runs in parallel here.
- **Register-file ports.** The paper's figure shows two operand paths per
  register file. A third port feeds the conversion unit, so that one line
  can read another's register while that line runs its own operation. The
  paper's own example does exactly this.
- **Memory loads.** Only immediate loads are merged into load clusters.
- **Clusters run in order.** The paper says the example's load cluster and
  operation cluster can run at the same time, and it counts a saving of
  3 LD.in + DIV.ft + 1 cycles. But the example's ADD.in reads two registers
  that the load cluster writes. Here the operation cluster starts after the
  load cluster has been written, as an in-order unit must.
- **Host-side parts are not part of this RTL.** These are the host (Alpha)
  processor, memory, cache and object cache, the MMU and the compiler. The
  paper names them but does not design them. The top exposes the host and
  memory sides as ports.
- **Evaluation.** The paper's results (load and computation parallelism,
  cycle reduction on six C++ benchmarks) come from compiler statistics. No
  benchmark program is run on this RTL.
- **Invented details.** Instruction encoding, handshakes, reset state and
  object sizes are this design's own.

## Size

The default configuration has:

- 4 x 32 registers (32, 32, 64 and 8 bits wide);
- 16 lanes per TEU, each lane with a full adder, multiplier and, where the
  line has one, a divider;
- 16 lanes of each of the three converters.

The 16 double-precision multipliers (53 x 53 bits) dominate the area. The
lane count is fixed by `typeline_pkg::LANES`. The TEUs, register files and
conversion unit take it as a parameter.
