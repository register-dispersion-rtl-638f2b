# Register Dispersion: a RISC-V vector unit with a compact register file

The RISC-V "V" extension requires 32 architectural vector registers. In a small
in-order core with a 256-bit vector engine, those 32 x 256 bits of flip-flops make
up most of the vector unit's area. Most vector kernels, however, only touch a
handful of registers at a time. This design therefore keeps just a few physical
vector registers next to the execution units, in a *compact vector register file*
(cVRF), and lets the architectural registers *disperse* into the memory system:
every architectural register has a fixed home address in data memory, and the
cVRF acts as a small fully associative cache of those homes. Software sees all 32
registers and needs no changes; only where a register currently lives changes.

The SystemVerilog here implements that vector unit: the tag and data halves of the
cVRF, the control unit that moves registers in and out, a dedicated mask register
v0, a decoder for an integer subset of RVV, an 8-lane integer ALU and a vector
load/store unit on the shared data-memory port. The default configuration is the
one the technique was evaluated with: 256-bit vectors, eight 32-bit lanes and a
cVRF of 8 registers (plus v0). The technique comes from the paper "Register
Dispersion: Reducing the Footprint of the Vector Register File in Vector Engines
of Low-Cost RISC-V CPUs" (Titopoulos et al., CF '25). This RTL is an independent
reconstruction of it. Everything the paper leaves open was chosen here, and those
choices are marked below.

## The register cache

| | |
|---|---|
| Cached registers | v1..v31 |
| Physical slots | `NPHYS` (default 8; the evaluated range is 3 to 16) |
| Associativity | full: any register can occupy any slot |
| Tag per slot | valid bit + 5-bit architectural register number |
| Replacement | FIFO: evict the register that has been resident longest |
| Home of register *v* | `VREG_BASE + (v-1)*32`, one 32-byte line each |
| v0 | separate register, never cached or evicted |

The cVRF is split across two pipeline stages. The **tag array** sits in decode
(ID), so hit or miss is known before the instruction goes on. The **data
registers** sit in execute (EX), and are addressed only by slot index. The indexes
travel through the ID/EX pipeline register with the instruction, `k = clog2(NPHYS)`
bits per operand.

The slots are used as a circular FIFO. *head* points at the oldest resident
register, *tail* at the next free slot, and *count* is the number of occupied
slots. A fill always goes into the tail slot, and an eviction always removes the
head. So the occupied slots are always the contiguous run head .. tail-1, and no
free list or age counters are needed. A hit does not reorder anything: this is
FIFO, not LRU.

## How an instruction gets its registers

This is the core of the design (`rd_control_unit`). An RVV arithmetic instruction
can read three vector registers: vs1 and vs2, and also vd, because
multiply-accumulate, masked-off elements and tail elements all need the old
destination value. A vector store reads its data register through the same vd
path. For the instruction waiting in ID:

1. **Look up all three at once.** The tag array has three comparator banks, so
   vs1, vs2 and vd are looked up in the same cycle. Operands that are not used,
   and operands that are v0, are skipped.
2. **All hit:** the instruction enters ID/EX in this cycle, together with the
   three slot indexes. There is no stall: a loop whose registers stay resident runs
   at one instruction per cycle, as if the register file were full size.
3. **Any miss:** decode stalls. Each cycle, the control unit takes the *first*
   missing operand, in the order vs1, vs2, vd, and places one micro-op into ID/EX
   instead of the instruction:
   - **FILL**, if a slot is free. It loads the register from its home address
     into the tail slot. The tag is written at once, so in the next cycle the
     operand already hits, even though the data is still on its way.
   - **SPILL**, if the cVRF is full. It stores the head slot's register to the
     home address named by that slot's tag, and frees the slot. The FILL follows in
     a later cycle.
4. Repeat from step 1 until every operand hits in the same cycle.

Step 4 covers a case that needs care: an eviction made for one operand can throw
out another operand of the same instruction that hit earlier. Here is an example
with three slots. vs1 hits in the head slot and vs2 misses. The spill made for vs2
evicts vs1. In the next cycle vs1 misses again and is fetched back. Because the
lookups are repeated every cycle, the instruction only leaves ID once all its
operands are resident together. With at least three slots this always settles.
In the worst case, three operands that all miss in a full cVRF cost three spills
and three fills (the end-to-end test checks exactly this count).

**Why no interlock is needed in EX.** Micro-ops and instructions share the single
ID/EX register, so EX executes them in program order. A spill therefore reads its
slot after every earlier instruction has written it. A fill writes its slot before
any later instruction reads it. No instruction that uses the old value of a slot
can still be waiting behind the micro-ops that change it. The price is
serialisation: while EX waits for memory, ID/EX is held, and the next entry waits.

Every eviction stores the register, whether or not it was changed; the register
file keeps no dirty bit.

## Pipeline and timing

```
 scalar core ──instr, rs1──►  ID: vector_decoder ─► rd_control_unit (+ cvrf_tag_array)
                                           │ instruction + 3 slot indexes, or SPILL/FILL
                                        ID/EX register (one entry)
                                           │
                              EX: cvrf data ─┬─► vector_alu ─► write vd (cVRF or v0)
                                  v0_mask_reg ┘
                                  vector_ldst_unit ◄──► data-memory port (shared with scalar LSU)
                                  vl / SEW state (vsetvli)
```

| Entry in EX | Cost |
|---|---|
| arithmetic | 1 cycle (combinational ALU, result written at the clock edge) |
| vsetvli / vsetivli | 1 cycle; the new vl is returned on `xwb_*` in that cycle |
| program load, fill | one line transfer: grant, then data 1 or more cycles later |
| program store, spill | one line transfer, finished at the grant |
| hit in ID | 0 stall cycles |
| miss, free slot | 1 micro-op (fill) |
| miss, cVRF full | 2 micro-ops (spill + fill) |

A vector register is exactly one 32-byte cache line, so every memory access in
this unit moves one whole line. Program vector loads and stores must be line
aligned.

## Vector state and instruction subset

`vector_decoder` accepts the following. The field positions are the standard RVV
ones.

- **OPIVV / OPIVX / OPIVI:** vadd, vsub, vrsub, vminu, vmin, vmaxu, vmax, vand,
  vor, vxor, vmerge / vmv.v, vsll, vsrl, vsra.
- **OPMVV / OPMVX:** vmul (low half), vmacc, vmadd.
- **OPCFG:** vsetvli and vsetivli.
  - LMUL must be 1, and SEW is 8, 16 or 32.
  - vl = min(AVL, VLMAX). With rs1 = x0, AVL is VLMAX.
- **Unit-stride loads and stores:** vle8/16/32 and vse8/16/32. Here vl counts
  elements of the access width.

Element *i* is written when *i* < vl and (the instruction is unmasked or bit *i*
of v0 is set). All other elements keep their old value; this is the
mask-undisturbed and tail-undisturbed policy. vmerge writes every body element.
The reset values are vl = 0 and SEW = 32, so software starts with vsetvli. Any
other word handed to the unit is accepted and dropped, with `in_illegal` raised.

## Interfaces of `rd_vpu`

- `in_valid`, `in_instr`, `in_rs1` → `in_ready`: the scalar core hands over a
  vector instruction and the value of its scalar rs1. It must hold them until
  `in_ready`, and an assertion checks that it does. While `in_ready` is low, the
  scalar pipeline is stalled.
- `mem_req`, `mem_we`, `mem_addr`, `mem_be`, `mem_wdata` / `mem_gnt`, `mem_rvalid`,
  `mem_rdata`: a 256-bit data port with byte enables and one request outstanding.
  - A request is held until `mem_gnt`.
  - A write completes at its grant.
  - Read data returns with `mem_rvalid` at least one cycle after the grant.
  - Arbitration with the scalar load/store unit belongs to the core.
- `xwb_valid`, `xwb_data`: the new vl, to be written to the scalar rd of vsetvli.
- `cnt_lookups`, `cnt_fills`, `cnt_spills`, `cnt_stall_cycles`, `occupancy`:
  counters for measuring the cVRF hit rate; (lookups − fills) / lookups
  approximates it.

## Files

| File | Contents |
|---|---|
| `rtl/rd_pkg.sv` | sizes (VLEN = 256), enums, decoded-instruction struct, mask helper |
| `rtl/cvrf_tag_array.sv` | tags: valid + register number per slot, 3 lookup ports |
| `rtl/rd_control_unit.sv` | FIFO pointers, hit/miss handling, spill/fill micro-ops |
| `rtl/cvrf.sv` | physical vector registers, 3 read ports, 1 write port |
| `rtl/v0_mask_reg.sv` | dedicated v0 |
| `rtl/vector_decoder.sv` | RVV decode |
| `rtl/vector_alu.sv` | 8 x 32-bit lanes, 8/16/32-bit integer elements |
| `rtl/vector_ldst_unit.sv` | program loads/stores and spills/fills on the memory port |
| `rtl/rd_vpu.sv` | top: ID stage, ID/EX, EX stage |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_ref_pkg.sv` | reference model and instruction encoders |
| `tb/data_mem_model.sv` | behavioural 2 MB data memory, random grant, 1-5 cycle reads |
| `tb/tb_rd_vpu_gemv.sv`, `tb/tb_gemv_runner.sv` | integer GemV kernel on several cVRF sizes |

## Simulating

With Verilator 5 (the simulator has two-state semantics, so everything read is
reset or initialised):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/rd_pkg.sv tb/tb_ref_pkg.sv tb/tb_rd_vpu.sv --top-module tb_rd_vpu
./obj_dir/Vtb_rd_vpu
```

Each testbench prints `TB_RESULT checks=N failures=M`. What they cover:

- **`tb_rd_vpu`** runs the whole unit at its default size. It checks the unit
  against a reference with a full 32-register file:
  - A six-register working set must run 63 back-to-back instructions in 63 cycles
    with no fill, spill or stall.
  - 600 random instructions over all 32 registers follow, with random SEW, vl,
    masks, loads and stores.
  - Three operands that miss in a full cVRF must cost exactly three spills and
    three fills.
  - At the end, all 32 registers and all stored data are compared.
  - The test also counts each mechanism: hit issue, stalled issue, fill into a
    free slot, eviction, masking, v0 write and vsetvli. It fails if any of them
    never happened.
- **`tb_rd_vpu_gemv`** runs an integer matrix-vector product (128 x 128, 32-bit)
  on separate units with different `NPHYS`. It checks y, prints cycles and hit
  rates, and requires that a cVRF large enough for the working set takes only
  compulsory misses. See "How big the cVRF must be" below.
- **`tb_rd_control_unit`** checks each spill/fill decision, slot and register
  against a FIFO model. ID/EX back-pressure is random.
- **The other block testbenches** compare their block with an independent model:
  tag lookups, data ports, byte-enabled v0 writes, decoded fields, ALU results per
  element width, and line addresses and merging in the load/store unit.

## How big the cVRF must be

A kernel runs at full speed once all the registers it uses *at the same time* fit
in the slots. It does not need to fit every register it names over its whole run.
Below that point, FIFO replacement can behave badly: if a loop uses its registers
round-robin, each register is evicted shortly before it is needed again. The GemV
test shows both cases. Speed is normalised to a run with 31 slots, which never
evicts.

| GemV loop | active registers | NPHYS | speed | hit rate |
|---|---|---|---|---|
| 8 accumulators + 1 temporary | 9 | 3 | 0.40 | 0.50 |
| | | 4 / 5 / 6 / 7 | 0.43 / 0.44 / 0.45 / 0.46 | 0.55 / 0.58 / 0.60 / 0.61 |
| | | 8 | 0.47 | 0.62 |
| | | 9, 16 | 1.00 | 1.00 |
| 7 accumulators + 1 temporary | 8 | 8 | 1.00 | 1.00 |

A small change in how a loop is unrolled or how its registers are grouped
therefore decides whether 8 slots are enough. With the default of 8, kernels
should keep at most eight vector registers (other than v0) live at a time.

## Parameters

- `NPHYS` (on `rd_vpu`, `rd_control_unit`, `cvrf_tag_array`, `cvrf`): number of
  physical slots, at least 3. It need not be a power of two.
- `VREG_BASE` (on `rd_vpu`, `vector_ldst_unit`): start of the 31-line home region.
  The default is the last 992 bytes of a 2 MB memory.
- `VLEN` is a package constant (256). Changing it changes the lane count and the
  line size together.

## Where this RTL departs from the evaluated design

- **No bfloat16 arithmetic.** The evaluated engine computes in 8/16/32-bit integer
  and bfloat16. Only the integer part is built, and only the operation subset
  above. Kernels that need floating point, such as the attention and stencil
  benchmarks used to evaluate the technique, cannot run on this RTL as they stand.
  The register-caching behaviour does not depend on the data type.
- **The scalar core is not included.** That covers the fetch, the instruction
  cache, the scalar decode and execute, and the integer and floating-point
  register files. Neither are the L1 caches or main memory, nor the arbitration of
  the shared memory port. The unit's ports stand where they connect.
- **Lookups are done in parallel; misses are handled one operand at a time.** The
  original description checks residency one operand after another. Here the three
  lookups happen at once, so that hits cost nothing, and only the misses are
  handled one at a time. The repeat-until-all-hit rule above is this design's own
  answer to the self-eviction case.
- **Own choices for what is not specified:** the ID/EX organisation, the
  memory-port handshake, the address of the home region, the reset values, the
  counters and the instruction encoding subset.
- **Area and power are not modelled.** The motivation for the technique is an
  area saving (the cVRF is about 3.5 times smaller than a 32-entry file in the
  original evaluation), but this RTL does not measure area or power.
