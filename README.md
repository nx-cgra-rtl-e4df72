# NX-CGRA: a statically scheduled 4 x 6 CGRA for transformer kernels

NX-CGRA is a small coarse-grained reconfigurable array (CGRA) that sits beside a microcontroller-class host. It runs complete integer kernels on its own: convolution, matrix multiplication, GELU, layer normalisation, quantisation and softmax.

The array has 24 cores of two kinds:

- 16 processing elements (PEs) do the arithmetic.
- 8 memory-operation blocks (MOBs) do all traffic to the shared L1 memory.

Every core has its own small micro-code program, produced by a compiler that schedules every operation to an exact cycle. There is therefore no switch network, no FIFO between cores and no handshake on the data links. A core reads its neighbours' output registers directly, and the compiler guarantees that the value it wants is there at that cycle.

This repository gives synthesizable SystemVerilog for the whole subsystem:

- the array and both core types
- the context memory and the memory controller that loads the micro-code
- the execution controller and the end-of-execution logic
- the APB register map
- the clock gates

It also gives a self-checking testbench for every block and an end-to-end test at full size. The host SoC, the shared L1 memory and the compiler are not part of it. The L1 is replaced by a behavioural model in the testbenches.

## 1. Subsystem

```
              OBI slave                                     8 x OBI master
 host ──► nx_ctx_mem (2 banks x 512 x 32) ◄── nx_mem_ctrl ──► nx_array ──► shared L1
                                                 ▲   │busy        ▲ done[23:0]
                                 fetch enable    │   ▼            │
 host ──► nx_mmap (APB) ── trigger ──► nx_gec ◄── EoE ── nx_eoe ◄──┘
            ▲ irq / status               │ start, array clock enable
            └─────────────── EoE flag ◄──┘
```

| Module | Role |
|---|---|
| `nx_cgra` | Top level. Ports: context OBI slave, APB slave, `irq_o`, and eight OBI masters (one per MOB). |
| `nx_ctx_mem` | 4 KiB context memory in two 512 x 32-bit banks (`nx_ctx_bank`). It has a host port and a memory-controller port. The controller wins a bank conflict. Each bank's clock is gated off in idle cycles. |
| `nx_mem_ctrl` | Walks the context records and writes each word into the right register file of the right core. |
| `nx_gec` | Global execution controller: IDLE → FETCH → START → RUN → IDLE. It also counts run cycles. |
| `nx_eoe` | End of execution: fires when every core that received micro-code has executed `EXIT`. |
| `nx_mmap` | APB register map and interrupt. |
| `nx_clock_gate` | Latch-based clock gate (the only latch in the design). It gates the array, each context bank and each core. |
| `nx_array` | The 4 x 6 torus of cores and the configuration decoder. |

### Register map (APB, byte offsets)

| Offset | Name | Access | Contents |
|---|---|---|---|
| 0x000 | CTRL | W | bit 0: start (fetch the context, then run). bit 1: clear the end-of-execution flag. |
| 0x004 | STATUS | R | bit 0: busy. bit 1: end-of-execution flag (equal to `irq_o`). bit 2: fetching the context. |
| 0x008 | CTX_BASE | R/W | Word address (10 bits) of the first record of the context to run. |
| 0x00C | CORES | R | Cores that received micro-code in the last fetch. |
| 0x010 | DONE | R | Cores that have executed `EXIT`. |
| 0x014 | CYCLES | R | Cycles spent in the last (or current) run. |

APB accesses have no wait states and never return an error.

### Running a kernel

1. The host writes one or more contexts into the context memory over OBI. It can keep several contexts side by side.
2. The host writes CTX_BASE, then CTRL.start.
3. The execution controller pulses *fetch enable*.
4. The memory controller reads records from CTX_BASE onwards and writes each data word into a core over the array's configuration port. It raises `done` after the end record.
5. The execution controller sends one start pulse, which every core sees in the same cycle. It then counts cycles until the end-of-execution signal.
6. The interrupt rises and stays high until it is cleared or the next run starts.

A kernel too large for one context runs as several. The host writes intermediate values to L1 from the first context, then points CTX_BASE at the next context and starts again.

### Context format

A context is a list of records. Each record has a header word followed by `count` data words:

```
header = { core[31:27], rf[26], first_index[25:20], count[19:14], 14'b0 }
         rf: 0 = micro-code RF, 1 = inline constant RF;  count = 0 ends the context
```

- Core numbers are `row*4 + col`.
- On the array's configuration port, a word is addressed by byte address `{core[12:8], rf[7], index[6:2]}`.
- Loading one word takes four to five cycles. In the end-to-end test, a 371-word context (328 data words) plus the run takes 1,464 cycles from trigger to end of execution.

## 2. The array

```
 row 0   PE  PE  PE  PE        every core sees the output registers of its N, E, S, W
 row 1   MOB MOB MOB MOB       neighbours; row 0 and row 5 are neighbours, and so are
 row 2   PE  PE  PE  PE        column 0 and column 3 (torus)
 row 3   PE  PE  PE  PE
 row 4   MOB MOB MOB MOB
 row 5   PE  PE  PE  PE
```

Each core has one 32-bit output register. That register is the only thing its four neighbours can see: a value produced in cycle *t* can be read by a neighbour in cycle *t+1*. Moving a value further takes a `MOV` at each hop. The compiler plans this routing, and the hardware has nothing else to route data.

### Micro-instruction format

Every core executes one 32-bit word per cycle:

```
[31:26] op  [25:23] srcA  [22:20] srcB  [19:16] idxA  [15:12] idxB  [11:8] rd  [7] we  [6:0] imm
```

- `srcA`/`srcB` choose one of eight sources:
  - a register file: the temporary RF in a PE, the constant RF in a MOB (index `idxA`/`idxB`)
  - the inline constant RF
  - the N, E, S or W neighbour
  - the core's own output register
  - zero
- Operand C of a PE is always temporary register `rd`. It serves as accumulator and as mask.
- The result goes to the output register, and to temporary register `rd` if `we` is set.

| Group | Operations |
|---|---|
| control (both) | `NOP`, `EXIT`, `JUMP imm`, `CJUMP imm` (taken if A ≠ 0), `MOV` (out ← A) |
| ALU32 (PE) | `ADD SUB AND OR XOR SLL SRL SRA SLT SLTU SEQ`; sub-word and data-manipulation ops: `MERGE` = (A & ~C) \| (B & C), `SEL` = C≠0 ? A : B, `BEXT` = byte `imm[1:0]` of A, `ADDC` = A+B+C |
| ALU8 (PE) | `MUL8U` (u8 x u8), `MAC4` = C + Σ four signed int8 lane products, `SAT8` (clamp to int8), `DIV8` (u8 / u8, 0xFF on divide by zero) |
| MUL16/32 (PE) | `MUL16U` (u16 x u16), `MUL32` (low word of signed x signed) |
| DIV32 (PE) | `DIV DIVU REM REMU`, with RISC-V results for divide by zero and overflow |
| memory (MOB) | `LD` out ← mem[A]; `LDP` out ← mem[prev + A]; `ST` mem[A] ← B; `STP` mem[prev + A] ← B |

In `LDP`/`STP`, `prev` is the address of the MOB's previous access. It is kept by the address generation unit (`nx_agu`), so a stream can walk memory with a constant stride. A MOB load with `we` set also writes the loaded word into constant register `rd`. A MOB can keep addresses and counters there.

With MAC4, the 16 PEs together perform 64 int8 multiply-accumulates per cycle.

### Lockstep execution and memory stalls

The schedule is static, so all 24 cores must stay in step. This is the part of the design that needs the most care. The rules are:

- **One step per cycle.** Each cycle, every awake core executes one instruction, unless the array is held.
- **A memory wait holds everyone.** A MOB's load-store unit (`nx_lsu`) raises `stall` while its request waits for a grant. It also raises `stall` while an access that is due to finish has no response yet. The array ORs the eight stalls into `hold`. `hold` freezes the program counter, output register and register files of every core. The schedule then resumes exactly where it stopped, and a neighbour's value is never lost or seen twice.
- **Load data arrive at a fixed step.** A load's data are written to the MOB's output register in the first non-held cycle after the load instruction retires. Neighbours therefore see the loaded word two schedule steps after the `LD`, however slow the memory was. Responses that come back while the array is held wait in a two-entry queue. Stores use the same queue, so memory accesses complete in program order.
- **Fast memory costs nothing.** With a memory that grants at once and answers in the next cycle, no stall ever occurs, and a MOB can issue one access per cycle.
- **Barriers.** Cores synchronise with `CJUMP` on a value passed from another core, as in a spin-wait. Apart from such barriers, each core follows its own control flow.

### Sleep and clock gating

- Each core has a sleep unit and a clock gate. A core is asleep after reset and after `EXIT`.
- Its clock runs only while it is awake, in the start cycle, and while the memory controller writes its registers.
- The whole array's clock is gated off while the execution controller is idle.
- Each context bank's clock runs only in cycles that access it.
- A `test_en_i` input forces every gate open.

## 3. Where this follows the published design, and where it does not

**Taken from the published design:**

- The block list of the subsystem and its interfaces: an OBI slave for the context memory, an APB slave for the register map, OBI masters to the shared memory.
- Two 512 x 32-bit context banks.
- The 4 x 6 torus with PE, MOB, PE, PE, MOB, PE rows.
- The units inside a PE: micro-code, constant and 3-read-port temporary register files; ALU32, ALU8, MUL16/32, DIV32; sleep unit; clock gate.
- The units inside a MOB: register files, a load-store unit with address generation, sleep unit, clock gate.
- The operator list.
- JUMP/CJUMP as barriers.
- Distribution of the context before start.

**This design's own choices, because the published description gives no details:**

- The instruction format and opcodes.
- Register-file depths: 32 micro-code words, 16 constants, 8 temporaries per core.
- Every unit completes in one cycle.
- The one-cycle link latency.
- The array-wide stall and the fixed load-commit step.
- The context record format.
- The register map.
- The end-of-execution rule, which waits only for cores that received micro-code.
- The arbitration in the context memory.

The exact operation set behind "sub-word masking" and "specialised data manipulation" is also a guess: MERGE, SEL, BEXT and ADDC.

**Known departures:**

- `MAC4` reads an accumulator (operand C). The published PE drawing shows only two operands into ALU8.
- A context that fills every register of all 24 cores needs 1,200 words, but the context memory holds 1,024. Real contexts leave registers empty or are split in two. The published softmax kernel is split in the same way.
- The shared 8-bank L1, the host SoC and the compiler are outside this RTL.
- The published 22 nm implementation figures (area, 200 MHz, power) cannot be reproduced from RTL.

## 4. Verification

Each block has a self-checking testbench in `tb/`, named `tb_<module>.sv`. It compares the block against values computed independently in the testbench, mostly over thousands of random cases. It then prints `TB_RESULT checks=N failures=M`.

`tb/nx_l1_model.sv` is a behavioural shared memory with N ports and M word-interleaved banks. It grants one port per bank per cycle and can refuse requests at random.

| Testbench | What it covers |
|---|---|
| `tb_nx_alu32`, `tb_nx_alu8`, `tb_nx_mul`, `tb_nx_div32` | Every operation on random and corner-case operands |
| `tb_nx_trf`, `tb_nx_cfg_rf`, `tb_nx_ctx_bank`, `tb_nx_agu` | Against reference arrays, including write priority and byte enables |
| `tb_nx_clock_gate`, `tb_nx_sleep_unit` | Glitch-free gating, test enable, sleep and wake rules |
| `tb_nx_lsu` | Random grant and response delays and random holds; data committed at the fixed step |
| `tb_nx_pe`, `tb_nx_mob` | Random programs against a cycle model of the core, including jumps, holds and loads |
| `tb_nx_array` | Configures all 24 cores. Checks every torus link, including the wrap-around, and MOB store and load under stalls. |
| `tb_nx_ctx_mem`, `tb_nx_mem_ctrl`, `tb_nx_gec`, `tb_nx_eoe`, `tb_nx_mmap` | Control blocks against cycle models |
| `tb_nx_cgra` | End to end at full size (below) |
| `tb_nx_gemm` | The gemm workload at its published size (below) |
| `tb_nx_quant` | The quant workload at its published size (below) |

`tb_nx_cgra` runs the top with no parameter changes:

- The host loads a 371-word context for 23 cores and starts it over APB.
- Each column computes an int8 matrix-vector product with MAC4, a bias, a shift and saturation.
- It also computes a 32-bit multiply/divide chain and a loop sum. The loop sum is handed to a MOB through a CJUMP barrier.
- The memory model refuses requests at random, and all four row streams hit the same bank.
- Results are checked in memory.
- The test then counts stalls, bank conflicts, barrier spins, cores sleeping, gated array cycles, context words and the end-of-execution interrupt. It fails if any of them never happened.

One run takes about 1,500 cycles and a few seconds.

`tb_nx_gemm` runs the gemm workload at its published size on the full-size subsystem: an int8 A of 32 x 64 times an int8 B of 64 x 32, with every result requantised to int8.

- B is kept transposed in memory, so both operands stream as words of four int8 values.
- Each context computes one output per array column, using the same column program as above.
- Between runs, the host rewrites only the constants that change: row addresses and output address.
- All 1,024 results are checked against a reference.

This takes 256 contexts and about 406,000 cycles. Most of that time goes into reloading contexts, not into MAC4 work. The hand mapping uses four of the 16 PEs. A compiler schedule that keeps all PEs busy and loops inside one context would be far faster. No such schedule is included here.

`tb_nx_quant` runs the quant workload at its published size: 64 int16 inputs and one int32 scale, requantised to int8 as sat8((x · scale) >>> 16). There is no signed 16-bit multiplier, so the product uses MUL32.

The kernel is one straight-line context of 457 words, laid out as four lanes. Each lane is a five-stage pipeline that runs along a row of the torus: MOB load → MUL32 → SRA → SAT8 → MOB store. Every stage issues one instruction per element, and each stage starts one step after the stage before it. Together the lanes use 12 PEs and all eight MOBs.

All 64 elements finish in 22 schedule steps. Memory refusals add stall cycles, and the pipeline must stay aligned through them; the test checks that it does.

The conv, gelu, norm and softmax workloads are not simulated. Every operator they need is built and tested, and their data fit the shared memory. What is missing is a mapping: the integer approximations of exp, sqrt and GELU and the schedule come from the compiler, and neither is available.

Every testbench was also run against a copy of its module with one deliberate bug, and every one of them failed.

### Simulating

The testbenches use only plain SystemVerilog: `$urandom`, no constraint solver, no file I/O. They work in two-state simulation. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/nx_pkg.sv $(ls rtl/nx_*.sv | grep -v nx_pkg) \
          tb/nx_l1_model.sv tb/tb_nx_cgra.sv --top-module tb_nx_cgra -o sim
./obj_dir/sim
```

Replace `tb_nx_cgra` with any other testbench. `nx_pkg.sv` must come first.

### Building micro-code

Micro-code words can be built with `nx_pkg::enc(op, srcA, idxA, srcB, idxB, rd, we, imm)`. A context header is built with `nx_pkg::ctx_header(core, rf, first_index, count)`. `tb_nx_cgra.sv` shows a complete context, written by hand in the way a scheduler would emit it.

## 5. Notes for synthesis

- All memories are plain arrays: the context banks and the register files. A technology flow would map the context banks to SRAM macros.
- `nx_clock_gate` would be replaced by the library's integrated clock-gate cell.
- Every other storage element is a flip-flop with an asynchronous active-low reset.
- The RTL has no vendor primitives and no simulation-only constructs. Its assertions (OBI request stability, queue bounds) are concurrent assertions that synthesis ignores.
