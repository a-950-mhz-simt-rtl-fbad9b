# A near-1 GHz SIMT soft processor: SystemVerilog model

This is a 32-bit integer SIMT (single instruction, multiple thread) processor designed around the clock limits of a modern FPGA. Its structure is simple so that it can close timing at the speed of the FPGA's embedded blocks, around 950 MHz:

- It is a single streaming multiprocessor of 16 scalar processors (SPs).
- All threads run in lockstep. An instruction issues every one of its threads before the next instruction starts.
- The shared memory is multi-ported (four reads and one write per clock) instead of banked, so no bank arbitration is needed.
- There is no floating point. The hard DSP blocks run faster in integer mode.
- There is no separate barrel shifter. Every shift is done by the multiplier: a left shift is a multiply by a power of two, and a right shift is the same multiply applied to bit-reversed data.

The design follows a published architecture: an embedded GPGPU reworked for near-1 GHz operation. That description covers the block structure, the pipeline control, the multiplier and shifter, and the shared memory in detail. It leaves the instruction set, the encodings and several widths open. Those parts are this implementation's own, and the section "Where this RTL departs from, or adds to, the published design" lists them.

## Threads, rows and the cost of an instruction

A program runs with `num_threads` threads, given in multiples of 16. The threads form a block that is 16 wide (one thread per SP) and `D = num_threads/16` rows deep. Thread `t` lives in SP `t % 16`, row `t / 16`.

Each clock, the instruction unit issues one **slot**: the current instruction applied to one row. For loads and stores, a slot also carries one *width position* within that row. How many clocks an instruction takes depends on its class:

| class | clocks per row (W) | why |
|---|---|---|
| operation (ALU, multiply, shift, LDI, TID, MOV) | 1 | all 16 SPs work in parallel |
| load | ceil(active SPs / 4) | four read ports |
| store | active SPs | one write port |
| control (branch, call, return, loop, stop, NOP) | one clock in total | no threads issued |

An instruction holds the pipeline for exactly `W x D` clocks. With 512 threads, an operation takes 32 clocks, a full load 128 and a full store 512.

**Dynamic thread scaling.** Each instruction can narrow its own thread block. Bits `scale[1:0]` select 16, 8, 4 or 1 active SPs. Bit `scale[2]` limits the instruction to the first row. For example, the last step of a reduction can store one word in a single clock instead of 512 clocks. SPs outside the active set do not write back.

## The instruction unit (`instr_fetch`)

```
 PC ──► address reg ──► I-MEM ──► instruction reg ──► decode ──► D reg ──► slot ──► delay chain ──► SPs, shared memory
  ▲          (all clocked by increment_pipe)                        │
  └──── branch address: immediate or top of return stack ◄── branch_unit, call_stack
```

**One enable for the whole pipeline.** Every fetch register advances together on a single signal, `increment_pipe`. The D (decode) register therefore holds the instruction being issued for as long as that instruction needs. Each stage also carries the PC of its instruction. This gives the address history needed for return addresses.

**Pipeline control (`next_thread_block`).** This block decides when the instruction in D is finished. It is the most timing-critical logic in the processor, so it is built as follows:

- **Counters.** There is one counter set per instruction class. Each set has its own `block_sizes` unit, which turns the thread count and the scale bits into `W` and `D`.
  - Operations count rows only.
  - Loads and stores count a width position. The row counter steps each time the width counter wraps.
- **Registered end signal.** The end-of-instruction signal is registered. Each set therefore compares its counters with the position **one clock before the end**: `(W-2, D-1)` when `W >= 2`, and `(0, D-2)` otherwise. The three compares are each gated by their class, ORed and registered.
- **Single-clock instructions.** An instruction of one clock (`W x D = 1`, or any control instruction) cannot use the early compare. The decode stage detects that case one stage ahead and sets a flag, which is ORed in after the register.
- **Result.** `increment_pipe = end_q | single`. It is high exactly in the last clock of each instruction. The counters clear when the pipe advances, so the next instruction starts at row 0, width 0.

**Branches.** All control flow is resolved in D. A taken branch does three things:

1. It loads the PC.
2. It zeroes the address register, the instruction register and D.
3. The three zeroed slots then drain as one-clock NOPs, so a taken branch costs three clocks.

The individual instructions behave as follows:

- `CALL` pushes `pc+1` onto an 8-entry shift-register stack (`call_stack`). `RET` branches to the top entry and pops it.
- `LOOP n` loads a loop counter.
- `ENDL t` branches back to `t` until the counter runs out, so the body runs `n` times. Both are single-clock instructions.

**Control delay chain.** Every slot passes through `DELAY` (3) registers before it reaches the SPs. Nothing after the decode stage makes control decisions, so this chain only adds latency. That latency lets the instruction unit be placed away from the datapath. You can lengthen the chain freely.

**Start and stop.** A one-clock `start` while idle runs the program from address 0. `STOP` ends the program. `busy` falls once the last slot has been written back.

## Scalar processor (`sp`)

Each SP contains:

- a register file (`regfile`): two copies of a 1K x 32 simple dual-port RAM, giving two reads and one write per clock;
- the soft-logic ALU (`logic_alu`);
- the multiplier/shifter (`int_mul_shift`).

Register `n` of the thread in row `r` is at address `r*REGS_PER_THREAD + n`.

Slot timing (clock 0 = the slot arrives from the delay chain):

| clock | action |
|---|---|
| 0 | register file addresses `{row,ra}`, `{row,rb}` |
| 1 | operands available; operand B may instead be the immediate (LDI) or the thread index `row*16+SP` (TID); both units start |
| 2 | load/store address `ra + imm[7:0]` and store data to the shared-memory muxes |
| 4 | load data back from read port `SP % 4` |
| 8 | write-back of the ALU, multiplier or load result |

All results are written back in the same clock (8), so write-backs never collide. The ALU is padded to the multiplier's 7-clock latency, and load data are delayed to match.

**There is no interlock.** An instruction that reads a register written by the previous instruction must start on a row at least 9 clocks after the previous instruction started on that row. This holds whenever the previous instruction ran for 9 clocks or more: for an operation, that means 144 threads or more. Short instructions, such as first-row-only ones or runs with few threads, need NOPs in between.

Only the valid bits that travel alongside the SP's data have a reset. The operand, address, product and write-back registers have none. On an FPGA, a register without a reset can be moved into the routing fabric's pipeline registers. Control state in the instruction unit is reset normally.

## Multiplier and integrated shifter (`int_mul_shift`)

This is the densest part of the design. It produces `mul.lo` and `mul.hi` (signed or unsigned), as well as `shl`, `shr` and `sar`, with a fixed latency of 7 clocks:

```
in reg ─► operand mux ─► DSP in ─► DSP internal ─► DSP out (A,B,C) ─► adder row 1 ─► adder row 2 / shift select ─► out reg
```

**Signed and unsigned in one datapath.** The operands are handled as 33-bit signed numbers and split into 16-bit halves, `a = AH*2^16 + AL`:

- The low halves are always zero-extended.
- The high halves are sign-extended for a signed multiply and zero-extended for an unsigned one.

**Partial products.** Two DSP Blocks (`dsp_block`, each two 18x19 multipliers) form the partial products:

- The first block, in independent mode, forms `A = AH*BH` and `C = AL*BL`.
- The second block, in sum mode, forms `B = AH*BL + AL*BH`.

The product is `{A[33:0], C[31:0]} + sext({B, 16'b0})`.

**Segmented add.** A single 66-bit carry chain would be too slow, so the add is split into 16-bit segments:

| bits | first adder row | second adder row |
|---|---|---|
| 15:0 | `C[15:0]`, nothing to add | — |
| 31:16 | sum, no carry-in, gives carry `c32` | — |
| 47:32 | sum without carry-in, gives generate `g`; also propagate `P = AND(x_i OR y_i)` | add `c32` |
| 63:48 | sum without carry-in | add `c48 = g OR (P AND c32)` |

The propagate bit `P` is a single registered bit, so each segment carry costs one gate. It is correct because the generate bit is taken from the same segment's sum: when `g = 0` and `P = 1`, the operands are exact complements, so a carry-in ripples through.

**Shifts.**

- **One-hot amount.** The shift amount `BB` becomes a one-hot word `1 << BB`, or all zeros when `BB > 31`.
- **Left shift.** `AA * onehot` is the left shift, taken from the low 32 product bits.
- **Logical right shift.** `AA` is bit-reversed before the multiply, and the low product half is bit-reversed again afterwards.
- **Arithmetic right shift.** This additionally needs the sign fill. The shift amount travels beside the datapath to the adder rows. There it becomes a unary mask (`BB` ones), which is bit-reversed into the top `BB` bit positions. That mask is ORed into the result when the data's sign bit is 1.

A 12-bit example: `110001101111` (-913) shifted right by 5:

- bit-reversed data: `111101100011`
- times one-hot `000000100000`
- low half `110001100000`, reversed again: `000001100011`
- OR with the fill mask `111110000000`
- result: `111111100011` (-29)

An arithmetic shift by more than 31 fills the whole word with the sign.

## Shared memory (`shared_mem`)

The shared memory holds 4096 x 32-bit words (16 KB), stored as four copies written together. Each copy feeds one read port.

- **Loads.** For read group `g`, a 16:4 read-address mux connects SPs `4g..4g+3` to ports 0..3. A full row of 16 SPs is therefore read in four clocks.
- **Stores.** 16:1 write-address and write-data muxes select one SP per clock.

Mux outputs and read data are registered, so data arrive two clocks after the address. A store is written before any later load reads, so load-after-store ordering is preserved.

The memory's write-control inputs come from the slot leaving the delay chain, delayed two clocks so that they line up with the SP address registers.

On the FPGA, the four 16 KB copies take 32 M20K blocks in 512 x 32 mode. The register files take 4 per SP (64 in all), and the instruction memory takes 2. That comes to 98 blocks, against 99 reported for the original example. The original's per-block table lists 64 blocks for the shared memory, which does not add up to its own total.

## Instruction set and encoding

```
[31:26] opcode  [25:21] rd  [20:16] ra  [15:11] rb  [10:8] scale  [7:0] offset
[15:0]  imm16 for LDI (sign-extended), BRA/CALL/ENDL targets and the LOOP count
```

| group | instructions |
|---|---|
| logic and add | ADD SUB AND OR XOR NOT CNOT ABS MOV |
| data | LDI (immediate), TID (thread index) |
| multiply | MULLO.U MULLO.S MULHI.U MULHI.S |
| shift | SHL SHR SAR (amount from rb, via the multiplier) |
| memory | LOD rd,[ra+off]  STO [ra+off],rb |
| control | BRA CALL RET LOOP ENDL STOP NOP |

`CNOT` gives 1 for a zero operand and 0 otherwise. `egpu_pkg` has the opcode values and two helpers, `make_instr` and `make_imm`, for writing programs in a testbench.

## Using the top level (`egpu_top`)

1. Write the program through `imem_we/imem_waddr/imem_wdata`.
2. Optionally preload data while `busy` is low, with `host_we/host_addr/host_wdata`.
3. Set `num_threads` and pulse `start` for one clock.
4. Wait for `busy` to fall.
5. Read results with `host_addr`. `host_rdata` is valid two clocks later.

Host access uses the memory's write port and read port 0, and only while `busy` is low.

| parameter | default | meaning |
|---|---|---|
| `MAX_THREADS` | 512 | threads the register files hold (rows = MAX_THREADS/16, at most 256) |
| `REGS_PER_THREAD` | 32 | registers per thread (512 x 32 = 16K registers) |
| `SMEM_WORDS` | 4096 | shared memory words (16 KB) |
| `IMEM_DEPTH` | 1024 | instructions |
| `DELAY` | 3 | control delay chain stages |

The largest published configuration, 4096 threads and 64K registers, is `MAX_THREADS=4096, REGS_PER_THREAD=16`.

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints `TB_RESULT checks=N failures=M` and contains a watchdog. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv rtl/egpu_pkg.sv \
          tb/tb_egpu_top.sv --top-module tb_egpu_top -Wno-fatal
./obj_dir/Vtb_egpu_top
```

- `tb_egpu_top` runs a 50-instruction program over 512 threads at the default sizes, then reloads the instruction memory and runs a second program over 160 threads. The first program covers every instruction class, a loop, a call, a branch over a STOP, and width- and depth-scaled instructions. The testbench checks:
  - the shared memory and register file contents against a per-thread model;
  - every instruction's clock count against `W x D`;
  - that each mechanism occurs: stalls, taken branches, flushed slots, call/return, loop-back, single-clock instructions and dynamic scaling.
- `tb_egpu_max` runs the 4096-thread, 64K-register configuration over all threads. It checks all 4096 memory words and the exact run time.
- `tb_egpu_reduce` runs a sum-of-squares reduction of 512 values at the default size and shows what thread scaling buys:
  - All threads square their element and store it back. The store takes 512 clocks.
  - The first row alone sums the 32 rows column by column. It stores 16 partial sums in 16 clocks.
  - One thread adds the partials and stores the total in 1 clock.
  - Depth-1 instructions no longer hide the write-back latency, so the program pads each dependency with NOPs to respect the 9-clock rule.
- `tb_instr_fetch` checks the exact slot stream and the three-clock branch penalty.
- `tb_next_thread_block` checks the `W x D` hold time and the row-major slot order for random instructions.

## Where this RTL departs from, or adds to, the published design

- **Instruction set.** The original supports 61 PTX-like instructions without listing them. This RTL has 27 instructions, and their encoding and the scale-field encoding are its own.
- **Predicates.** Predicated execution is an option in the original and is not built here.
- **Loops.** The loop instructions are mentioned but not described. A single loop counter with `LOOP`/`ENDL` is used, so loops do not nest. The original calls its loops zero-overhead. Here `LOOP` and `ENDL` are single-clock instructions, but jumping back from `ENDL` is a taken branch. Each pass therefore costs one clock for `ENDL` plus the three-clock refill. Hiding that refill would need loop-end detection at the fetch address, which the original does not describe.
- **Hazards.** There is no register interlock. Programs must respect the 9-clock rule above.
- **Sizes.** The register-file layout (row x register), the two-copy register file, the load address adder, the common write-back clock, the SP-to-read-port grouping and all latencies outside the multiplier are this design's choices. The same holds for the instruction memory size, the stack depth and its overflow behaviour, and the start/stop/busy handshake.
- **Host port.** The host port on the shared memory is added so that data can enter and leave the processor.
- **Arithmetic shift by more than 31.** The original forwards a 5-bit shift amount to form the sign fill. Here an extra out-of-range bit makes an arithmetic shift by more than 31 return all sign bits.
- **DSP Block.** `dsp_block` models the function and the three pipeline stages of the FPGA's hard DSP Block in plain RTL. On an FPGA it would map to the vendor primitive.
- **Timing-closure techniques.** Placement, hyper-register retiming and multi-instance stamping are FPGA implementation matters and are not represented.
