# eGPU streaming multiprocessor in SystemVerilog

eGPU is a small SIMT processor for FPGAs: one streaming multiprocessor (SM)
with 16 scalar processors (SPs) that run up to 512 threads in lock step. It
is built to be clocked near the FPGA's block-RAM and DSP limit. To get there
it gives up almost everything a large GPU has for control:

- no caches;
- no thread divergence;
- no hardware interlocks;
- a single instruction stream.

It keeps what makes small numerical kernels fast:

- a shared memory with four read ports;
- cheap variable-width instructions;
- a dot-product/reduction core;
- an inverse-square-root unit;
- zero-overhead loops.

This RTL implements the SM in its main configuration:

| Property | Value |
|---|---|
| SPs (lanes) | 16 |
| Wavefronts | up to 32 of 16 threads each (512 threads) |
| Registers per thread | 16 × 32 bits |
| Instruction word | 40 bits |
| Instruction memory | 512 words |
| Shared memory | 2048 words, 4 read ports, 1 write port |
| Arithmetic | FP32, INT32, UINT32 |

Everything is synthesizable SystemVerilog-2017. The FP32 arithmetic is
written in plain logic; there are no vendor primitives. Each block has its
own self-checking testbench, and one testbench runs the whole SM at its
default size.

## Threads, wavefronts and the thread block

A program runs over one *thread block* of `cfg_nwf` wavefronts
(1 to 32). A *wavefront* is 16 threads, one per SP. Thread `t` is lane
`t mod 16` of wavefront `t / 16`.

Each SP's register file holds the registers of its thread in every
wavefront. The register address is `{wavefront[4:0], reg[3:0]}`, which gives
512 words per SP.

Threads also have a 2D identity for the `TDX`/`TDY` instructions. The row
length is `2^cfg_x_log2`:

- `IDx = t mod 2^cfg_x_log2`
- `IDy = t >> cfg_x_log2`

Each instruction can narrow the thread block it applies to. The two
Variable fields of the instruction word do this:

| `var_w` | lanes used | `var_d` | wavefronts used |
|---|---|---|---|
| 0 | 16 | 0 | all `cfg_nwf` |
| 1 | 8 (lanes 0-7) | 1 | `cfg_nwf/2` |
| 2 | 4 (lanes 0-3) | 2 | `cfg_nwf/4` |
| 3 | 1 (lane 0) | 3 | 1 |

A narrowed depth is never less than one wavefront.

Narrowing is how a program does less work as a computation shrinks. The
tail of an FFT or a reduction is an example. Narrowing also shortens the
instruction's run time; there is no divergence or predication.

## The instruction word

Field widths and order, most significant first. RTL bit `n` is bit `n+1` in
the paper's 1-based numbering.

| Bits | Field | Meaning |
|---|---|---|
| 39:38 | `var_w` | wavefront width, table above |
| 37:36 | `var_d` | block depth, table above |
| 35:30 | opcode | see below |
| 29:28 | type | 0 INT32, 1 UINT32, 2 FP32 |
| 27:24 | Rd | destination register (store: the data register) |
| 23:20 | Ra | source A (load/store: the address register) |
| 19:16 | Rb | source B |
| 15 | X | thread snooping |
| 14:0 | immediate | sign-extended; also the load/store offset, jump target or loop count |

Instruction set. The opcode numbers are this design's.

| Op | Mnemonic | Action | Cycles |
|---|---|---|---|
| 0 | NOP | nothing | 1 |
| 1 | ADD | Rd = Ra + Rb (INT, UINT or FP by type) | 1 per wavefront |
| 2 | SUB | Rd = Ra - Rb | 1 per wavefront |
| 3 | MUL | FP: Ra × Rb; integer: 16×16 → 32 product of the low halves (signed for INT32) | 1 per wavefront |
| 4-7 | AND OR XOR NOT | bitwise (NOT uses Ra) | 1 per wavefront |
| 8, 9 | LSL LSR | shift by Rb[4:0]; LSR is arithmetic for INT32 | 1 per wavefront |
| 10 | LOD | Rd = shared[Ra + imm] | ceil(W/4) per wavefront |
| 11 | STO | shared[Ra + imm] = Rd | W per wavefront |
| 12 | LODI | Rd = imm | 1 per wavefront |
| 13, 14 | TDX TDY | Rd = thread IDx / IDy | 1 per wavefront |
| 15 | DOT | lane 0's Rd = Σ over lanes of Ra × Rb (FP32) | 1 per wavefront |
| 16 | SUM | lane 0's Rd = Σ over lanes of Ra (FP32) | 1 per wavefront |
| 17 | INVSQR | lane 0's Rd = 1/√(lane 0's Ra) (FP32) | 1 per wavefront |
| 18 | JMP | PC = imm | 1 |
| 19 | JSR | push PC+1, PC = imm | 1 |
| 20 | RTS | PC = pop | 1 |
| 21 | LOOP | if counter > 1: decrement it and PC = imm | 1 |
| 22 | INIT | loop counter = imm | 1 |
| 23 | STOP | halt, raise `done` | 1 |

In the Cycles column, W is the wavefront width.

**Thread snooping.** When X is 1, the source register addresses do not use
the issuing wavefront. They take their wavefront number from the immediate:
Ra from `imm[14:10]` and Rb from `imm[9:5]`. A thread can then read the same
register of any other thread in its lane.

The main use is after a `DOT`/`SUM` sequence. Each wavefront's result sits
in lane 0 of that wavefront's registers, and a single-thread instruction can
then gather them.

## Instruction issue

The front end has these stages:

1. **Fetch.** `instr_fetch` computes the next PC. The instruction memory is
   read at that address in the same cycle, so the word at its output always
   matches the current PC. A taken `JMP`, `JSR`, `RTS` or `LOOP` therefore
   costs no extra cycle.
   - The loop counter is set by `INIT n`. The body, closed by `LOOP start`,
     then runs n times.
   - The return stack has 4 entries.
2. **Decode.** `decoder` splits the fields, sign-extends the immediate and
   sorts the opcode into one of four stepping classes: control, per
   wavefront, load, store.
3. **Sequencing.** `sequencer` holds the PC while it walks the instruction
   over the thread block:
   - operations issue one wavefront per cycle;
   - loads issue four threads per cycle: lanes 4p to 4p+3 in phase p, one
     per shared-memory read port;
   - stores issue one thread per cycle, because the memory has one write
     port.

   In the last cycle the sequencer raises `last` and fetch moves on.
4. **Thread IDs and control word.** `thread_gen` produces the 16 lanes'
   thread IDs for the wavefront being issued. `output_block` forms the
   per-cycle control word and registers it:
   - register addresses, with thread snooping applied;
   - write enables;
   - the immediate;
   - each lane's enable and thread ID.

   It broadcasts the word to all SPs.

The cost of an instruction is easy to predict. A 256-point FFT with 128
threads (8 wavefronts) spends 32 cycles on each indexed load and 128 cycles
on each store; an arithmetic instruction takes 8 cycles.

## The scalar processor and its pipeline

Each SP (`sp`) contains:

- two copies of a 512×32 register file, which share one write port and give
  two read ports;
- an FP32 ALU;
- an integer ALU.

The FP ALU is one multiply-add datapath, `a*m + c`:

- ADD/SUB set m = 1.0 and c = ±b;
- MUL sets c = 0.

The product is rounded before the add. Rounding is to nearest-even, with
subnormal inputs and outputs flushed to zero.

The integer ALU's adder is a carry-select adder split over two pipeline
stages. Both ALUs have a latency of 4.

The register file's write data comes through two multiplexer stages:

1. The first stage picks the immediate, the shared-memory load data or the
   thread ID.
2. The second stage picks that or the ALU result. In lane 0 it also takes
   the dot-product/SFU result.

Write timing. Cycle 0 is the cycle in which the control word reaches the SP,
which is one cycle after the sequencer issues it. "Readable from" gives the
first cycle a later instruction can read the value.

| Result | Written at end of cycle | Readable from cycle |
|---|---|---|
| LODI, TDX, TDY | 2 | 3 |
| LOD (shared memory) | 5 | 6 |
| ALU (ADD ... LSR) | 8 | 9 |
| INVSQR (lane 0) | 6 | 7 |
| DOT, SUM (lane 0) | 7 | 8 |

**There are no interlocks.** The wavefronts themselves hide the latency:

- An instruction that runs over 9 or more wavefronts (144 or more threads)
  can be followed directly by one that uses its result.
- With fewer wavefronts, the program must put independent instructions or
  `NOP`s in between.

The register file has one write port. Two results that reach it in the same
cycle collide, because the sources have different latencies. For example:

- a `LOD` followed three cycles later by an `ADD`;
- a `LODI` issued six cycles after an ALU operation.

This is also the program's responsibility. If it happens, the ALU result
wins, then the dot/SFU result, and the other write is lost. The stage
boundaries are this design's. The paper gives only the total depth of 9.

## Shared memory and its multiplexers

`shared_mem` holds 2048 words. It keeps four identical copies so that it has
four read ports, and all copies are written through the one write port.

- An internal read address presented in cycle t gives data in cycle t+2.
- The instruction's offset is added inside the memory.

`rd_addr_mux` routes the four active lanes' addresses to the four ports
during a load. Lane l is served by port `l mod 4`. `wr_mux` picks the single
storing lane's address and data for the write port.

Both multiplexers are AND-OR structures. Their one-hot rules are checked by
concurrent assertions in `egpu_sm`:

- at most one store per cycle;
- at most one load per read port.

**The external (global) port** reads or writes one word at a time. It uses
the write port and read copy 0, but only in cycles when the SM does not use
them; `shm_ready` shows this. An access while `shm_ready` is low is ignored.
A read's data appears with `shm_rvalid` three cycles after `shm_re`, and it
stays on `shm_rdata` until the next external read.

## Dot product and inverse square root

`dot_product` multiplies the 16 lanes' Ra and Rb values and adds the
products in a balanced pairwise tree: 16 multiplies and 15 adds, with every
operation rounded.

- For `SUM` the multiplier input is forced to 1.0.
- Lanes outside the instruction's width contribute 0.
- The latency is 5 cycles, one wavefront per cycle.

`sfu_invsqrt` computes 1/√x from lane 0's Ra. It starts from the classic
integer seed `0x5f3759df - (x >> 1)` and applies three Newton-Raphson steps,
`y(1.5 - x/2·y²)`, one per pipeline stage; the latency is 4. The result is
within a few ulp for normal positive inputs.

Special inputs:

- ±0 gives ±inf;
- negative inputs and NaN give NaN;
- +inf gives +0.

Both units write their result to lane 0, in the destination register of the
wavefront that issued the instruction.

## Top-level interface (`egpu_sm`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `start`, `start_pc` | in | 1, 9 | pulse to begin at `start_pc` |
| `cfg_nwf` | in | 6 | wavefronts in the thread block, 1-32; hold while running |
| `cfg_x_log2` | in | 4 | log2 of the 2D thread-space row length |
| `running`, `done` | out | 1 | running until `STOP`, then `done` |
| `imem_we`, `imem_waddr`, `imem_wdata` | in | 1, 9, 40 | load the instruction memory |
| `shm_we`, `shm_re`, `shm_addr`, `shm_wdata` | in | 1, 1, 11, 32 | shared-memory global port |
| `shm_ready` | out | 1 | global port free this cycle |
| `shm_rdata`, `shm_rvalid` | out | 32, 1 | global read data |

A host loads the program and the input data, pulses `start`, waits for
`done` and reads the results back through the global port. The host is
outside this design.

## Where this RTL departs from or goes beyond the paper

These are this design's choices, not the paper's:

- **Encodings.**
  - The opcode and type encodings.
  - The encoding of the Variable sub-fields.
  - Where the snooping wavefront numbers sit in the immediate.
- **Pipeline.**
  - The stage-by-stage timing inside the pipeline.
  - The write-port priority.
- **Loops and subroutines.**
  - The loop count convention (`INIT n` gives n passes).
  - One loop counter.
  - A 4-entry return stack.
- **Memory sizes.**
  - The instruction memory has 512 words; the paper gives no size.
  - The shared memory has 2048 words. That is what the block RAMs left over
    after the register files would give (48 − 32 = 16 RAMs of 128 words in
    each of 4 copies). The paper also discusses larger configurations.
- **Arithmetic.**
  - The FP32 arithmetic is written in logic, not mapped onto DSP blocks.
  - Subnormals are flushed to zero.
  - Multiply-add is unfused.
  - Integer `MUL` takes the low 16 bits of each operand, signed for INT32.
  - `SUM` adds Ra and ignores Rb.
  - `INVSQR` uses a seed followed by Newton-Raphson steps; the paper gives
    only its function.
- **Thread space.** The 2D thread space has a power-of-two row length.
- **External port.**
  - The global port uses idle cycles.
  - Reads arrive 3 cycles after the request.

Not built:

- the host/agent that loads and starts the SM;
- the placement of four SMs in one FPGA sector;
- the vendor DSP-block and block-RAM primitives.

The RTL uses inferred memories and logic arithmetic instead. It is written
for correct function; it is not tuned to reach 750 MHz.

## Simulating

Each testbench compiles on its own with Verilator 5. Packages go first. A
unit test, for example the SP:

```
verilator --binary --timing --assert -Irtl \
  rtl/egpu_pkg.sv rtl/fp32_pkg.sv rtl/regfile.sv rtl/fp_alu.sv rtl/int_alu.sv \
  rtl/sp.sv tb/egpu_tb_pkg.sv tb/tb_sp.sv --top-module tb_sp
./obj_dir/Vtb_sp
```

The whole SM, at its default parameters:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
  rtl/egpu_pkg.sv rtl/fp32_pkg.sv rtl/*.sv tb/egpu_tb_pkg.sv tb/tb_egpu_sm.sv \
  --top-module tb_egpu_sm
./obj_dir/Vtb_egpu_sm
```

Verilator may warn that a package is given twice on that command line; list
the other files by name to avoid the warning.

Every testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it with a failure if it hangs.

**The end-to-end test (`tb_egpu_sm`).** It loads a 48-word program and two
input vectors through the external ports and runs 8 wavefronts. It checks:

- every register result it reads back through stores;
- the total cycle count against the issue rules above.

It also counts each mechanism at least once:

- integer and FP operations;
- immediates and thread IDs;
- full and narrowed loads and stores;
- DOT, SUM, INVSQR;
- thread snooping;
- JSR/RTS and INIT/LOOP;
- NOP;
- STOP.

The floating-point reference values in the testbenches are computed in
`real` arithmetic (see `tb/egpu_tb_pkg.sv`), independently of the RTL's
`fp32_pkg`.

## Files

`rtl/`:

| File | Contents |
|---|---|
| `egpu_pkg.sv` | constants, opcodes, instruction and control-word types |
| `fp32_pkg.sv` | FP32 multiply and add functions |
| `egpu_sm.sv` | top: the SM |
| `instr_fetch.sv`, `imem.sv`, `decoder.sv`, `sequencer.sv`, `thread_gen.sv`, `output_block.sv` | instruction section |
| `sp.sv`, `regfile.sv`, `fp_alu.sv`, `int_alu.sv` | scalar processor |
| `shared_mem.sv`, `rd_addr_mux.sv`, `wr_mux.sv` | shared memory and its multiplexers |
| `dot_product.sv`, `sfu_invsqrt.sv` | reduction core and SFU |

`tb/`:

- `tb_<module>.sv` is each block's testbench.
- `egpu_tb_pkg.sv` holds the reference FP model and a small assembler
  function.
