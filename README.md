# A DSP-extended RISC-V cluster for near-threshold IoT endpoints

This design runs signal-processing kernels at a supply voltage close to threshold, so it has
to do as much work as possible in each cycle. It does that in two ways. First, each RISC-V core
has DSP extensions: hardware loops, post-increment and register-offset loads and stores,
misaligned accesses, packed-SIMD arithmetic on 2x16-bit and 4x8-bit lanes, dot products,
shuffles, and fixed-point operations that add or multiply, then round and normalise. Second,
four such cores work in parallel on a shared, banked L1 data memory, and fetch through one
shared instruction cache. The SystemVerilog here covers the cores, the cluster's memories, and
the interconnect between them.

## The cluster

`pulp_cluster` instantiates the following:

- four `riscv_core`s;
- one `shared_icache`: 4 kB in four banks, with a 128-bit refill port towards L2;
- one `periph_demux` per core;
- a `log_interconnect` with five masters (the four cores and a DMA port) and eight banks;
- eight `tcdm_bank`s, each holding 8 kB of SRAM and 1 kB of latch-style memory (SCM), for
  72 kB in total.

The address map is:

- The TCDM is word-interleaved, starting at `0x1000_0000`: word *i* lives in bank *i* mod 8.
- Every other address goes to that core's peripheral port.

Some blocks are not included: the DMA engine, the peripheral interconnect, the cluster bus, the
debug unit, the power manager and the L2 memory. Their connections are top-level ports.

All data ports use one protocol. A request (`req`, `addr`, `we`, `be`, `wdata`) is held until
`gnt`. Then `rvalid` with `rdata` comes back; the TCDM answers exactly one cycle after the
grant. Each bank has a round-robin arbiter. A master that loses arbitration keeps its request
up, and the cluster reports that cycle as a contention.

## The core pipeline

The core has four stages: IF, ID, EX, WB.

**IF.** The `prefetch_buffer` holds one 128-bit line. It also keeps the last halfword of the
previous line, so a 32-bit instruction that straddles two lines is joined without a stall. A
fetch costs a new line only on a branch, a jump or a hardware-loop jump. The
`compressed_decoder` expands RV32C instructions in IF. The `hwloop_unit` compares the fetch PC
with the end address of two loop sets, and redirects fetch to the start address while the
count is not yet exhausted. This gives loops with no overhead.

**ID.**

- Decoding happens here.
- The `register_file` has three read ports. The third one supplies the accumulator for
  mac and dot products, the old destination for insert and shuffle2, and the offset register
  of register-offset stores.
- Operands are forwarded from the EX result, and then from the load in WB.
- Jumps, traps and `mret` are resolved in ID.

**EX.** Each functional unit has its own operand registers, so that units which are idle do
not toggle. The units are:

- the vector ALU, with a 36-bit carry-cut adder, round and normalise, clip, bit manipulation
  and the shuffle unit;
- the multiplier: 32x32 multiply with mac/msu, 16x16 fractional multiply, and 2x16-bit and
  4x8-bit dot products;
- the divider: iterative, taking 2 to 32 cycles;
- the CSR file;
- the LSU.

Branches are resolved in EX.

**WB.** Load data arrives in WB and is written through register-file port B. ALU results use
port A. A load and an ALU operation therefore never compete for a write port. An instruction
that uses a load result directly after the load waits one cycle.

A misaligned load or store is split into two word accesses. The higher word is accessed first.

## Instruction encodings

The extensions are known by their mnemonics, but the encodings are this design's own. They are
listed in full in `riscv_pkg.sv`:

| Opcode | Instructions |
|---|---|
| `0x0B` | post-increment and register-offset loads |
| `0x2B` | post-increment and register-offset stores |
| `0x57` | packed SIMD; `instr[31:26]` is the operation, `funct3` = {byte mode, vv/scalar/immediate} |
| `0x5B` | `p.add/subN/RN`, `p.mul/mac` fractional, `p.clip(u)`, bit-field operations |
| `0x7B` | hardware-loop setup; `instr[7]` selects the loop set |

The shuffle masks hold one 3-bit field per byte, packed from bit 0:

- bits 1:0 give the byte index;
- bit 2 selects the register: 1 for rs1, 0 for the old rd.

## Departures and limits

- `mulh` takes a single cycle, instead of the multi-cycle sequence of the original multiplier.
- The divider has its own subtractor.
- There are no interrupts. `fence` and `wfi` execute as nops.
- If a taken branch cancels the last instruction of a hardware loop after that instruction has
  already decremented the loop count, the count is off by one. Compiled loops do not do this.
- The prefetch buffer does not fetch the next line ahead of time.
- Several choices are this design's own:
  - the instruction cache is direct mapped and serves one refill at a time;
  - TCDM arbitration is round robin;
  - within each bank, the SCM holds the lowest 256 rows.
- Synthesising the whole cluster in yosys takes more than ten minutes, because of resource
  sharing. Each core on its own finishes in seconds.

## Verification

Each testbench in `tb/` checks itself and ends by printing `TB_RESULT checks=N failures=M`.

- The ALU, multiplier, divider and register-file testbenches compare the block against a
  behavioural reference on random operands. The divider testbench also checks that its
  latency stays within 2 to 32 cycles and depends on the operands.
- `tb_riscv_core` runs a program from `tb_prog_pkg`: a hardware-loop 8-bit dot product with
  post-increment loads, followed by a misaligned load and one check each of clip, addRN,
  mulsRN, div, shuffle, compressed instructions, a branch loop and a post-increment store. The
  data memory's grant delay is random.
- `tb_pulp_cluster` runs the same program on all four cores at the default size. The input
  data is loaded through the DMA port and the results are read back the same way.

Both program tests count the following events, and fail if any of them never happened:

- I$ misses;
- TCDM contentions;
- hardware-loop jumps;
- misaligned splits;
- load-use stalls;
- taken branches;
- compressed instructions;
- line-crossing fetches;
- EX stalls.

The decoders, the controller, the CSR file, the LSU, the interconnect, the banks and the cache
have no testbench of their own. They are tested only through these two program tests.

To simulate the cluster with Verilator:

```
verilator --binary --timing rtl/riscv_pkg.sv tb/tb_prog_pkg.sv \
  $(ls rtl/*.sv | grep -v riscv_pkg) tb/tb_pulp_cluster.sv --top-module tb_pulp_cluster
./obj_dir/Vtb_pulp_cluster
```
