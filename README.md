# FlexGrip-style soft GPGPU in SystemVerilog

This is a synthesizable SIMT processor for FPGAs: a small GPGPU that runs
data-parallel integer kernels, CUDA-style, without re-synthesising the
hardware for each program. A host writes a kernel binary, its parameters and
its input data over an AXI4-Lite port, says how many thread blocks of how
many threads to run, and starts it. A block scheduler deals the thread blocks
out to one or more streaming multiprocessors (SMs). Each SM runs up to 24
warps of 32 threads on a row of scalar processors (SPs), one instruction for
a whole warp at a time, and handles data-dependent branches inside a warp in
hardware with a per-warp reconvergence stack.

The design follows the architecture published as FlexGrip (Andryc, Merchant
and Tessier, "Soft GPGPUs for Embedded FPGAs: An Architectural Evaluation").
That publication describes the block structure, the five-stage SM pipeline,
the divergence hardware, the physical limits and the two application-specific
trims (a shallower warp stack; dropping the third operand and the
multiplier). It does not give an instruction encoding, a register map or
cycle-level timing. Those parts are this design's own, and the sections
below say where.

## Configuration

The default parameters give the baseline machine: one SM with eight SPs,
three source operands with a multiplier, and a warp stack 32 entries deep.
Every size can be overridden on `flexgrip_top`:

| Parameter | Default | Meaning | Origin |
|---|---|---|---|
| `NUM_SM` | 1 | streaming multiprocessors | published baseline (2 also evaluated) |
| `NUM_SP` | 8 | scalar processors per SM (8, 16 or 32) | published baseline |
| `NUM_OPERANDS` | 3 | 3 = multiply/multiply-add present, 2 = removed | published trim |
| `WSTACK_DEPTH` | 32 | warp-stack entries per warp (0 = no divergence support) | published trim |
| `MAX_WARPS` | 24 | warps per SM (768 threads) | published limit |
| `MAX_BLOCKS` | 8 | thread blocks resident per SM | published limit |
| `NUM_REGS` | 8192 | 32-bit general registers per SM | published limit |
| `SMEM_BYTES` | 16384 | shared memory per SM | published limit |
| `IMEM_WORDS` | 1024 | instruction (system) memory, 32-bit words | own choice |
| `CMEM_WORDS` | 1024 | constant memory words | own choice |
| `GMEM_WORDS` | 16384 | global memory words | own choice |

All memories are on-chip arrays. The published system kept global memory in
external DDR; here it is a 64 KB array, so data sets must fit in 16,384
words (see "Workload sizes").

## How a kernel runs

1. **Host set-up.** The host writes the kernel into instruction memory, the
   kernel parameters into constant memory, the input into global memory, and
   then the launch registers: number of blocks, threads per block (at most
   256), registers per thread, shared-memory bytes per block and start PC.
   Writing 1 to the control register starts the kernel.
2. **Blocks per SM.** The block scheduler first works out how many blocks
   one SM can hold. A block needs ceil(threads/32) warps,
   warps·32·regs-per-thread registers and its shared-memory bytes. The count
   is the largest k ≤ 8 for which k blocks fit all three budgets. It is found
   by adding one block's needs per cycle, so no divider is needed. A block
   that cannot fit at all ends the kernel at once with the error bit set.
3. **Dealing blocks.** A pointer walks round the SMs, one step per cycle.
   The SM under the pointer gets the next block if it has a free slot below k
   and its GPGPU controller is idle. A completed block frees its slot, so
   later blocks refill it.
4. **Thread IDs.** The SM's GPGPU controller records the block number of the
   slot, then writes each thread's index inside the block into that thread's
   register R0, one row of threads per cycle. It uses only cycles in which
   the pipeline's write stage leaves the register file free. Then it makes
   the block's warps ready in the warp unit. Slot s uses warps s·W to
   s·W+W−1, where W is the number of warps per block.
5. **Execution.** The warps run until every thread has executed `EXIT`. The
   SM then reports the slot as done, and the scheduler counts it.
6. **Completion.** When every block has completed, the status register shows
   done, `irq_done` rises, and a cycle counter holds the kernel's run time.
   The host reads the results back from global memory.

### Host register map (AXI4-Lite, byte addresses)

| Address | Access | Content |
|---|---|---|
| `0x0000_0000` | W | bit 0: start |
| `0x0000_0000` | R | `{overflow, error, done, busy}` in bits 3..0 |
| `0x0000_0004` | R/W | number of thread blocks |
| `0x0000_0008` | R/W | threads per block |
| `0x0000_000C` | R/W | registers per thread |
| `0x0000_0010` | R/W | shared-memory bytes per block |
| `0x0000_0014` | R/W | kernel start PC |
| `0x0000_0018` | R | cycles of the last kernel |
| `0x0000_001C` | R | blocks per SM chosen by the scheduler |
| `0x1000_0000` + | W | instruction memory |
| `0x2000_0000` + | W | constant memory |
| `0x3000_0000` + | R/W | global memory |

Only full 32-bit transfers are supported, one at a time. A write is accepted
when address and data are both valid, and its response follows one cycle
later. Read data follows the read address by one cycle. `overflow` is sticky.
It reports that a warp pushed onto a full warp stack, which means the kernel
nests deeper than `WSTACK_DEPTH`.

## The SM pipeline

```
 warp unit -> fetch -> decode -> read -> execute -> write
     ^                                               |
     +------------- next PC, mask, state ------------+
```

**Warp unit.** This holds a PC, a 32-bit thread mask and a state for every
warp. The states are idle, ready, busy, waiting at a barrier, and done. It
issues ready warps in round-robin order, starting after the warp it issued
last. An issued warp stays busy until the write stage returns its next PC,
mask and state. So each warp has at most one instruction in flight. The
pipeline therefore needs no hazard detection or forwarding; other warps fill
the pipeline instead. A barrier opens when every unfinished warp of a block
waits at it.

**Fetch.** Fetch reads 64 bits at the warp's PC. Bit 0 of the first word
marks an 8-byte instruction; otherwise the instruction is 4 bytes long and
its upper word is ignored. The next PC is PC+4 or PC+8.

**Decode.** Decode splits the instruction into fields: opcode, destination,
three sources with their kinds, immediate, guard predicate and condition,
predicate destination, address register and memory space.

**Read.** A warp's 32 threads are handled as 32/`NUM_SP` rows: four rows for
8 SPs, two for 16, one for 32. The read stage sends one row per cycle to
execute, and holds the earlier stages until the last row has gone. For each
row it:
- reads the guard predicate register of each thread;
- looks the predicate and the instruction's condition up in the predicate
  table;
- ANDs the result with the warp's thread mask to get the row's active
  threads; and
- sets up up to three *operand units*.

An operand unit delivers, for every lane:
- a register;
- the immediate; or
- a word of global, shared or constant memory at address = address register
  (or base register) + signed offset.

For a store it delivers the computed address instead. `S2R` reads the
special registers: thread index, block index, block size and grid size.
With `NUM_OPERANDS=2` the third unit and its register read port are not
built.

**Execute.** There is one scalar processor per lane, plus one control-flow
unit. A scalar processor does add, subtract, multiply, multiply-add (a·b+c
on the shared adder), and/or/xor, shifts, min/max and compare. Every result
also yields four flags: sign, zero, carry and overflow. The control-flow
unit sees every row of a warp instruction. It collects the active mask and,
on the last row, computes the warp's next PC, mask and state.

**Write.** This stage writes results to the vector register file, flags to a
predicate register, and addresses to an address register. It performs
stores to shared or global memory, and returns the warp update to the warp
unit. The thread-ID writes of the GPGPU controller use the register-file
write port in cycles when this stage does not.

### Register files and memory layout

- **Vector register file.** There is one bank per lane, with one read port
  per operand unit and one write port. Thread t of the SM lives in bank
  t mod `NUM_SP`. Its register r is at bank address
  (t div `NUM_SP`)·regs-per-thread + r.
- **Predicate registers.** Each thread has four registers of 4 bits:
  sign, zero, carry and overflow.
- **Address registers.** Each thread has four registers of 32 bits.
- **Shared memory.** Each SM has its own. A block's area starts at
  slot·bytes-per-block.
- **Global and constant memory.** These are shared by all SMs. They have a
  read port for every lane and operand unit of every SM, plus one for the
  host.

## Branch divergence

Threads of one warp may disagree on a branch. The hardware then runs one
side with the other threads masked off, runs the other side, and merges the
threads again. Each warp has its own stack of 66-bit entries: a 32-bit
address, a 2-bit type and a 32-bit mask.

- `SSY target` pushes {current mask, *reconvergence*, target} before a
  region that may diverge.
- A branch whose guard passes for some active threads but not for others
  pushes {current mask, *taken*, branch target}. The warp continues on the
  fall-through path with only the not-taken threads. A branch that all
  active threads agree on simply jumps, or falls through.
- `SYNC` pops the top entry.
  - A *taken* entry sends the warp to the saved target with the mask
    saved & ~current. These are the threads that took the branch and have
    not run yet.
  - A *reconvergence* entry sends the warp to the saved address with the
    whole saved mask.
  - Threads that have already executed `EXIT` are removed in both cases.
  - With an empty stack, `SYNC` does nothing.
- `EXIT` marks the active threads finished. If other paths are still on the
  stack, it pops one like `SYNC`; otherwise the warp is done.

With `WSTACK_DEPTH=0` no stack is built. Such a configuration suits only
kernels without divergent branches: a divergent branch then sets the
overflow bit and its taken path is lost. A push onto a full stack sets the
sticky overflow bit.

The predicate table implements 16 conditions on the four flags: always, LT,
EQ, LE, GT, NE, GE, never, the unsigned LTU, GEU, GTU and LEU, and overflow,
no overflow, sign and no sign. The carry flag of a subtraction or compare is
1 when a ≥ b unsigned.

## Instruction format

The published design executes NVIDIA G80 (compute capability 1.0) binaries,
but that encoding is not public. This design uses its own format, which
carries the same kinds of fields.

| Bits | Field |
|---|---|
| 0 | 1 = 8-byte instruction |
| 6:1 | opcode |
| 12:7 | destination register |
| 18:13 | source 1 register |
| 24:19 | source 2 register |
| 28:25 | guard condition |
| 30:29 | guard predicate register |
| 31 | write flags to a predicate register |
| 47:32 | 16-bit immediate / memory offset |
| 53:48 | source 3 register |
| 55:54 | source 1 kind |
| 57:56 | source 2 kind |
| 59:58 | predicate destination |
| 61:60 | address register |
| 63:62 | memory space |

Opcodes: `NOP MOV ADD SUB MUL MAD AND OR XOR SHL SHR SAR MIN MAX CMP S2R
R2A LD ST BRA SSY SYNC BAR EXIT` (0 to 23).

Source kinds are register, immediate, constant memory and shared memory.
Memory spaces are global, shared and constant. A 4-byte instruction has
bits 63:32 zero, so its sources are registers and its immediate is 0.
`flexgrip_tb_pkg` contains a small assembler class (`Asm`) with labels and
the example kernel used by the testbenches.

## Timing

- A warp instruction occupies the read and execute stages for 32/`NUM_SP`
  cycles: 4 cycles with 8 SPs, 1 cycle with 32 SPs.
- A warp's next instruction can issue only after the previous one has been
  written back. That round trip passes through every pipeline register.
- With several ready warps, the read stage is the bottleneck, and the SM
  retires one row of `NUM_SP` thread-operations per cycle.
- Setting up a block costs 4 cycles per warp (8 SPs) to write the thread IDs,
  plus one launch cycle.
- The block scheduler needs k+1 cycles to work out the blocks per SM.

## Workload sizes

The published evaluation runs autocorrelation, bitonic sort and parallel
reduction on up to 256 values, and matrix multiplication and transpose on
matrices up to 256×256.

- The 1-D data sets fit the default 16,384-word global memory easily.
- A 256×256 matrix alone is 65,536 words, so those two benchmarks fit only
  up to 64×64 at the default size. Raise `GMEM_WORDS` for larger matrices.

The included end-to-end kernel is a block-wise sum reduction. It touches
every instruction class: `S2R`, `MUL` and `MAD`, 4-byte instructions,
constant operands, global loads, shared stores, a barrier, a compare-driven
loop, `SSY`/`BRA`/`SYNC` divergence, a predicated `EXIT` and global stores.

## Departures from the published design

- **Warp count.** One sentence of the publication speaks of "eight warps per
  SM", while its table of limits gives 24 warps and 768 threads. This design
  uses 24.
- **Instruction set.** The instruction set is the encoding above, not G80
  binaries. Only the 24 listed integer operations exist. The published
  design tested 27 G80 integer instructions.
- **Memory.** Global memory is on-chip and 16,384 words by default.
- **Host.** There is no host processor. The publication used a MicroBlaze
  running a driver, with a host interface described elsewhere. Here any
  AXI4-Lite master acts as the driver, with the register map above.
- **Control-flow unit.** It is written as combinational next-state logic
  over registered row masks, not as an explicit state machine. The stack
  push and pop rules are as published.
- **Blocks in flight.** The number of blocks in flight is set by the
  resource limits times the number of SMs. The publication also says this
  number depends on the SP count; here the SP count only changes how fast
  each warp runs.
- **Own rules.** The one-instruction-per-warp rule, the barrier rule, the
  warp-to-slot mapping and R0 as the thread-ID register are this design's
  own choices.

## Files

- `rtl/flexgrip_pkg.sv` holds the shared types: the instruction and
  decoded-instruction structs, opcodes, conditions, warp context and kernel
  configuration.
- Each other file in `rtl/` holds one module:
  - `flexgrip_top` is the whole GPGPU.
  - `host_interface`, `block_scheduler`, `streaming_multiprocessor`,
    `gpgpu_controller` and `warp_unit` handle the host, the blocks and the
    warps.
  - `fetch_stage`, `decode_stage`, `read_stage` (using
    `read_operand_unit` and `pred_lut`), `execute_stage` (using
    `scalar_processor` and `control_flow_unit` with `warp_stack`) and
    `write_stage` are the pipeline.
  - `vector_regfile`, `pred_regfile`, `addr_regfile`, `data_mem` and
    `instr_mem` are the storage.
- `tb/` holds one self-checking testbench per module, `tb_<module>.sv`. It
  also holds:
  - `tb_flexgrip_top`: the reduction kernel on two SMs and on one SM without
    a warp stack. It counts each mechanism (row stalls, divergence, both
    kinds of pop, barriers, predicated-off threads, slot waits) and fails if
    any never occurs.
  - `tb_flexgrip_full`: the default configuration running 24 blocks of 256
    threads.
  - `axi_host_bfm`: the AXI4-Lite master used by both.

Every testbench ends by printing `TB_RESULT checks=N failures=M`.

## Simulating

Verilator 5 with `--timing` runs every testbench:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/flexgrip_pkg.sv tb/flexgrip_tb_pkg.sv tb/tb_flexgrip_top.sv \
    --top-module tb_flexgrip_top
./obj_dir/Vtb_flexgrip_top
```

Swap in any other `tb_*` file and top-module name to test a single unit.

- The end-to-end test takes seconds.
- The full-size test runs about 71,000 GPGPU cycles and takes a few minutes.
- `tb_flexgrip_top` shows the effect of the configurations on the same
  20 blocks of 64 threads. Two SMs need about 7,200 cycles, one SM about
  twice that. On the SM built without a warp stack, the divergent branch
  sets the overflow bit, as it should.
