# A small RISC-V vector unit with a reduced vector register file

RVV 1.0 requires 32 architectural vector registers. In a small embedded core
with a short vector length that register file is one of the largest parts of
the vector unit. The idea this design implements is simple: keep the RVV
instruction encoding and execution model, but provide only 16 vector registers
(8 is the other sensible choice). Software for such a core is ordinary RVV
code compiled with a register allocator told that only v0..v15 (or v0..v7)
exist; any instruction whose register group reaches past the last register is
an illegal instruction.

The point worth demonstrating in hardware is that little is lost. For the DSP
kernels below (matrix products, accumulation, dot product, matrix-vector
product) 16 registers are enough to keep the multiply-accumulate unit as busy
as it would be with 32, because a narrow datapath combined with chaining
already lets one instruction stream feed three functional units at once.

The SystemVerilog here is a complete vector unit for that configuration:
VLEN = 64, DLEN = 32, one 32-bit memory port, a load/store unit, an ALU and a
multiply-accumulate unit, chained at 32-bit granularity. It runs the kernels
with exactly the cycle counts of the hand schedules it was designed against.

## Configuration

| Parameter   | Default | Meaning |
|-------------|---------|---------|
| `NUM_VREGS` | 16      | architectural vector registers (16 or 8; RVV 1.0 has 32) |
| `VLEN`      | 64      | bits per vector register |
| `DLEN`      | 32      | datapath width: bits each unit reads and writes per cycle, also the memory width |
| `ALU_LAT`   | 3       | ALU latency, operand read to register write |
| `MAC_LAT`   | 5       | multiply-accumulate latency |
| load latency | 1      | memory request to register write (fixed) |

Registers are physical one-for-one: with 16 registers the file holds 1024
bits (512 with 8, 2048 for a standard 32-register file). In the default
build the register file is 1024 of the unit's roughly 2350 flip-flops.

ELEN is 64 (Zve64x without floating point): SEW = 64 is allowed for loads and
stores, and 64-bit values appear as results of widening 32-bit operations.
The scalar side is a 32-bit core (`XLEN = 32` in `rvv_pkg`).

The parameters are meant to be changed within these rules: `VLEN` a multiple of
`DLEN`, both powers of two, `DLEN >= 32`, `NUM_VREGS` a power of two up to 32.
Only `NUM_VREGS` = 16 and 8 at VLEN = 64, DLEN = 32 are verified.

## Structure

```
                 insn, rs1, rs2                       res (new vl), illegal
 scalar core ─────────────────────► vissue ───────────────────────────► scalar core
                                     │  vdecode (legality, uop)
                                     │  vtype / vl CSRs, vset*
                                     ▼ dispatch (one per cycle, in order)
                ┌───────────────┬───────────────┬───────────────┐
                ▼               ▼               ▼               │
              vlsu            valu            vmac              │
          (vfu_seq)      (vfu_seq +       (vfu_seq +            │
                          vwb_pipe 3)      vwb_pipe 5)          │
             │ ▲             │ ▲             │ ▲                │
     1R/1W   │ │   3R/2W     │ │   4R/2W     │ │     chunk masks│
             ▼ │             ▼ │             ▼ │                ▼
            ┌────────────── vrf (NUM_VREGS x VLEN, DLEN chunks) ─┐   vchain
            └────────────────────────────────────────────────────┘   (go / stall
             │                                                        per unit)
             ▼
        32-bit memory port
```

| Module            | Role |
|-------------------|------|
| `rvv_pkg`         | shared types: micro-operation (`uop_t`), unit and operation enums, debug struct |
| `rvv_vector_unit` | top level; wires the blocks, exposes the core and memory ports |
| `vissue`          | instruction handshake, vtype/vl state, vset*, dispatch gating |
| `vdecode`         | RVV 1.0 decoding, legality against `NUM_VREGS`, uop generation |
| `vchain`          | chaining and hazard control at chunk granularity |
| `vfu_seq`         | per-unit sequencer: current instruction, one-entry queue, chunk masks |
| `vwb_pipe`        | write-back pipeline of the ALU and MAC (latency stages) |
| `vlsu`            | unit-stride loads and stores |
| `valu`            | add/subtract, logic, min/max, shifts, move, widening add/subtract |
| `vmac`            | multiply, multiply-accumulate, widening multiply-accumulate |
| `vrf`             | the register file |

## Chunks and groups

Everything in the unit is counted in **chunks**: DLEN-bit slices of the
register file. With VLEN = 64 and DLEN = 32 register `vN` is chunks `2N` and
`2N+1`, and the 16-register file has 32 chunks.

A functional unit executes an instruction as a sequence of **groups**, one per
cycle. A group is one chunk of the narrowest source operand. For a
non-widening operation a group reads one chunk of each source and writes one
chunk. For a widening operation (e.g. `vwmacc`, 8 x 8 -> 16 bits) a group
reads one chunk of each narrow source, reads two chunks of the wide
accumulator and writes two chunks, so the unit writes a double-width result
every cycle. That is why the ALU and the MAC each have two write ports.

The number of groups of an instruction is `ceil(vl * SEW / DLEN)`; with
LMUL = 2 and a full vl an 8-bit instruction runs four groups, i.e. it occupies
its unit for four cycles. These are the cycles the single-issue front end
uses to issue to the other units.

Elements past `vl` are left undisturbed (tail-undisturbed for all writes,
byte-enable controlled), so register contents beyond vl never change.

## Timing

Cycle numbers below are relative to the cycle `t` in which the instruction is
accepted (`insn_valid && insn_ready`).

* The instruction reaches its unit at the end of cycle `t`; its first group
  can read operands in cycle `t+1`.
* Loads: the memory request for a group is made in its read cycle; data
  returns the next cycle and is written to the register file in that same
  cycle (latency 1).
* ALU: a group read in cycle `r` is written in cycle `r+3`.
* MAC: a group read in cycle `r` is written in cycle `r+5`.
* Stores: a group reads its chunk and writes memory in the same cycle.
* The register file is write-through: a read of a chunk in the cycle it is
  written returns the new value. A dependent group may therefore read a
  result in the very cycle it is written; this is what makes back-to-back
  chaining possible without a lost cycle.
* Each unit processes one group per cycle while nothing stalls it.
* `vset*` is executed in the issue stage. Its new vl is returned one cycle
  after acceptance; vtype and vl are captured in each instruction at
  dispatch, so a `vset*` never waits for older vector instructions.

## Chaining and hazards

This is the part of the design that makes the kernels fast, and the part that
needs the most care.

### What the units report

Each unit's sequencer (`vfu_seq`) holds a current instruction and at most one
queued instruction. Every cycle it reports bit masks over all chunks:

| Mask       | Meaning |
|------------|---------|
| `rd_now`   | chunks the current group reads |
| `wr_now`   | chunks the current group writes |
| `rd_fut`   | chunks the current instruction still has to read (this group included) |
| `wr_fut`   | chunks it still has to write into the pipeline (this group included) |
| `wr_all`   | all chunks the current instruction writes |
| `q_rd`, `q_wr` | chunks read / written by the queued instruction |
| `pipe_wr`  | chunks with results inside the unit's write-back pipeline, not yet written |

### Which instructions are older

Instructions issue in order, but three units run concurrently, so `vchain`
has to know, for each unit's current and queued instruction, which
instructions in the other units are older. It keeps a small counter per pair
of units: at dispatch, unit F records how many instructions each other unit O
holds (0, 1 or 2: O's current and queued). Whenever O finishes the last group
of an instruction the counter drops by one. When F's queued instruction
becomes current, its counters move with it. A count of 1 means "O's current
instruction is older", 2 means "O's current and queued instructions are both
older".

### When a group may go

A unit's current group proceeds (`go`) unless

* **RAW**: a chunk it reads is in some unit's write-back pipeline
  (`pipe_wr` of any unit), or is still to be written by an older instruction
  (`wr_fut`, or `q_wr` for a count of 2); or
* **WAR**: a chunk it writes is still to be read by an older instruction in
  another unit (`rd_fut`, or `q_rd`).

**WAW** between units is settled at dispatch: an instruction is held in the
issue stage (`waw_stall`) while its destination overlaps chunks that another
unit will still write (in its pipeline, current or queued instruction).
Writes within one unit are ordered by its own in-order pipeline.

A group that goes while it reads chunks of a still-running older instruction
is counted as **chained**: it started before its producer finished.

Waiting can never deadlock: a younger writer only writes a chunk after every
older reader has read it, so any in-flight write a reader sees belongs to an
older instruction, and the oldest instruction in the machine is never blocked.

### The one-entry queue

A unit accepts a new instruction while it is still executing one
(`fu_free` = queue empty). Without it, an instruction for a busy unit would
block the single issue slot and every instruction behind it, including
instructions for idle units. With it, the front end keeps issuing, which is
what lets the single-pointer matrix product reach a loop of 8 cycles with the
MAC busy in every one of them.

### Example: the matrix-product loop

The inner loop of a 2 x 16 matrix product with 8-bit inputs and 16-bit
accumulators (e8, LMUL = 2, vl = 16) issues, per iteration, one `vle8.v` of a
row of B and two `vwmacc.vx` (one per row of A), with scalar instructions in
between. The load takes 4 cycles on the memory port; each `vwmacc` takes 4 MAC
cycles. The first `vwmacc` chains onto the load: it reads chunk 0 of the new
row in the cycle the load writes it. The second follows in the MAC queue. The
load of the next iteration waits (WAR) until the MAC has read the chunks it
overwrites, and then runs in parallel with the remaining MAC groups. The
result is a 9-cycle loop with 8 MAC cycles, or an 8-cycle loop with the MAC
never idle when the two scalar loads share one address register.

## Reduced register file and legality

`vdecode` accepts an instruction only if every register group it names lies
inside the file and is aligned:

* a group of `n` registers starting at `vR` must satisfy `R mod n = 0` and
  `R + n <= NUM_VREGS`, with `n` = LMUL (or EMUL for loads/stores and for
  the wide operands of widening instructions, 2·LMUL);
* widening instructions require LMUL <= 4 and LMUL >= 1, and their
  destination may not overlap a narrow source at all (stricter than RVV 1.0,
  which allows one overlap case);
* masked forms (`vm = 0`), SEW = 64 arithmetic, unsupported opcodes and
  instructions while `vill` is set are illegal (whole-register loads and
  stores excepted: they do not depend on vtype).

An illegal instruction is accepted, dropped, and reported by a one-cycle
`illegal` pulse one cycle later, so the scalar core can raise its
illegal-instruction exception. The 5-bit register fields are unchanged, so
code for the 16-register core runs unchanged on a 32-register RVV core.

## Supported instructions

| Class | Instructions |
|-------|--------------|
| configuration | `vsetvli`, `vsetivli`, `vsetvl` (RVV 1.0 AVL and vill rules) |
| memory | `vle8/16/32/64.v`, `vse8/16/32/64.v` (unit stride, unmasked); `vl1/2/4/8re8/16/32/64.v`, `vs1/2/4/8r.v` (whole registers) |
| ALU | `vadd.vv/vx/vi`, `vsub.vv/vx`, `vrsub.vx/vi`, `vand/vor/vxor.vv/vx/vi`, `vmin(u)/vmax(u).vv/vx`, `vsll/vsrl/vsra.vv/vx/vi`, `vmv.v.v/x/i`, `vwadd(u)/vwsub(u).vv/vx/wv/wx` |
| MAC | `vmul.vv/vx`, `vmacc.vv/vx`, `vwmacc.vv/vx`, `vwmaccu.vv/vx` |

The paper names only the ALU operations its kernels use and gives one latency
(3 cycles) for all "other ALU operations". The element-wise integer operations
above are included under that heading, with RVV 1.0 semantics; shift amounts
are taken modulo SEW and `.vi` shift amounts are unsigned.

Everything else is illegal. Vector memory base addresses must be aligned to
DLEN/8 bytes.

## Interface of `rvv_vector_unit`

| Port | Dir | Meaning |
|------|-----|---------|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset (vill set, vl = 0, registers cleared) |
| `insn_valid`, `insn_ready`, `insn` | in/out/in | one vector instruction per cycle, valid/ready |
| `rs1`, `rs2` | in | scalar operand values that go with `insn` |
| `res_valid`, `res_data` | out | new vl of a vset*, one cycle after acceptance |
| `illegal` | out | one-cycle pulse, one cycle after an illegal instruction was accepted |
| `busy` | out | some vector instruction is still executing |
| `mem_req`, `mem_we`, `mem_addr`, `mem_wdata`, `mem_be` | out | one DLEN-wide access per cycle |
| `mem_rdata` | in | read data, the cycle after the request |
| `dbg` | out | per cycle: `go`, `chained`, `raw_stall`, `war_stall` per unit, `waw_stall`, `fu_stall` |

The scalar core must not start a scalar access to memory written by vector
stores (or read by vector loads) until `busy` is low; the unit itself does not
order vector and scalar memory accesses.

## Kernels

Steady-state loops, measured over the middle iterations with the schedules
given below (issue cycles and scalar instructions as in the hand-scheduled
kernels the unit was designed for).

| Kernel | Data | LMUL | Registers | Loop | Unit use (expected = measured) |
|--------|------|------|-----------|------|-------------------------------|
| matrix x matrix, 2 x 16 tile | 8 x 8 -> 16 | 2 | 10 | 9 cycles | MAC 8/9 |
| same, one address pointer | 8 x 8 -> 16 | 2 | 10 | 8 cycles | MAC 8/8 |
| matrix x matrix, 2 x 8 tile | 8 x 8 -> 16 | 1 | 5 | 9 cycles | MAC 4/9 |
| matrix x matrix, 2 x 32 tile | 8 x 8 -> 16 | 4 | 20 | — | does not fit 16 registers |
| accumulation | 16 + 16 -> 32 | 2 | 6 | 4 cycles | ALU 4/4, load 4/4 |
| dot product | 16 x 16 -> 32 | 2 | 8 | 8 cycles | MAC 4/8, load 8/8 |
| matrix x vector | 8 x 8 -> 16 | 4 | 12 | 9 cycles | MAC 8/9 |

The LMUL = 4 matrix product needs two 8-register accumulators plus the B
rows; with 16 registers its instructions are rejected as illegal, which the
end-to-end test checks. With `NUM_VREGS = 8` the accumulation, the dot
product and the LMUL = 1 matrix product still fit and run with the same loop
timings (verified); the LMUL = 2 matrix product and the matrix-vector product
do not.

## Where this design departs from the hand schedules it follows

* **Register alignment.** In the accumulation kernel the 32-bit accumulator
  (EMUL 4) was placed at v2, and in the matrix-vector kernel the 16-bit
  accumulator (EMUL 8) at v4. Neither is aligned to its group size, which RVV
  1.0 requires; this design uses v4 and v8 respectively. Register counts and
  cycle counts are unchanged.
* **Whole-register load.** The accumulation kernel was written with
  `vl4re16.v`, a whole-register load of four registers (8 memory beats),
  while its schedule shows an LMUL = 2 load of two registers in 4 beats.
  The unit implements `vl4re16.v` as RVV defines it, so the kernel uses
  `vle16.v` at LMUL = 2, which matches the schedule.
* **Operand order.** In the matrix-vector kernel `vwmacc.vx` was written with
  the scalar and vector operands swapped; the test uses the legal order
  `vwmacc.vx vd, rs1, vs2`.
* **Load write timing.** The schedule of the accumulation kernel shows the
  first chunk of a load written in its issue cycle. With one cycle from issue
  to the memory request and one-cycle load latency, this design writes it two
  cycles after issue; every other kernel assumes this timing, and the loop
  length is the same.
* **Latency definition.** ALU and MAC latency are counted from the cycle a
  group reads its operands to the cycle its result is written; results are
  usable in that same cycle through the register file's write-through path.
* **Own choices** where no detail was given: the one-entry queue per unit,
  the write-through register file, the chunk-mask hazard scheme, WAW
  resolution at dispatch, the valid/ready core interface, vset* executed in
  the vector unit, port counts of the register file, aligned base addresses.

## Verification

Each block has a self-checking testbench in `tb/`:

| Testbench | What it checks |
|-----------|----------------|
| `tb_vrf` | reset, byte-enable writes on all ports, write-through reads; 16 and 8 registers |
| `tb_vdecode` | legality at the register-file boundary (16 and 8 registers), alignment, widening rules, uop fields and group counts |
| `tb_vissue` | vset* results against an RVV model, vill, dispatch gating under random unit-busy/WAW inputs, illegal pulse timing |
| `tb_vchain` | RAW on pipelines and older writers, chaining, WAR, queued older instructions, WAW at dispatch |
| `tb_vlsu` | random loads/stores against memory and register models, 1-cycle load latency, one beat per cycle |
| `tb_valu`, `tb_vmac` | 300 random operations each against a reference model with random stalls, exact latency 3 / 5 |
| `tb_rvv_vector_unit` | the whole unit at default size: all kernels above with cycle counts, whole-register moves, directed hazards, a random instruction stream; an ISA reference model checks all registers and memory |
| `tb_rvv_vector_unit_r8` | the same with `NUM_VREGS = 8`: the kernels that fit in v0..v7 with the same loop timings, and rejection of those that do not |

The end-to-end test counts every mechanism (chained groups in each unit, RAW
and WAR stalls, WAW and busy-unit dispatch stalls, illegal instructions,
vset*) and fails if any never occurs. It runs in well under a second.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/rvv_pkg.sv tb/tb_rvv_vector_unit.sv \
          --top-module tb_rvv_vector_unit -o sim
./obj_dir/sim            # add +trace for a per-cycle trace of issue and chaining
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`.

## Limits

* Only the instruction subset above; no masking, reductions, compares, strided,
  indexed or segment memory access, fixed-point or narrowing instructions.
* Vector memory accesses must be DLEN/8-aligned, and the memory must answer
  every request with data the next cycle (no wait states).
* No precise exceptions from vector memory accesses.
* Only the default configuration and the 8-register variant are verified;
  other VLEN/DLEN combinations are untested.
