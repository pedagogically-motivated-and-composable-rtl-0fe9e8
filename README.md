# WISCV — a five-stage RV32I teaching processor

WISCV is a small RISC-V processor built to be read, taken apart and put back
together in a computer-architecture course. It runs the RV32I base integer
instruction set, the Zicsr extension and `MRET`. It uses a classic five-stage
pipeline: fetch, decode, execute, memory, write-back. Each textbook part of the
pipeline is its own module with a narrow interface, so a student can replace
one part without touching the others:

- register file
- ALU
- immediate generator
- decoder
- hazard unit
- branch predictor
- CSR/exception unit
- cache
- memory

A single-cycle core with the same ports can take the pipeline's place, so
the two designs can be compared on the same programs. Every retired
instruction is reported on a trace port. Testbenches compare the
trace, instruction by instruction, with a software reference model of the ISA.

```
            +--------------------------- wiscv_soc ----------------------------+
 load port  |                                                                  |
 ---------->|  wiscv_main_memory (unified, LATENCY cycles, 128 KiB)            |
            |      ^ ireq/irsp                       ^ dreq/drsp               |
            |  wiscv_cache (I)                   wiscv_cache (D)               |
            |      ^                                 ^    (bypassed when       |
            |      |                                 |     USE_CACHE = 0)      |
            |  +------ wiscv_core (or wiscv_single_cycle_core) -----+            |
            |  | IF -> ID -> EX -> MEM -> WB                      |--> trace   |
            |  | regfile, imm_gen, decoder, alu, hazard_unit,     |            |
            |  | branch_predictor, csr                            |            |
            |  +--------------------------------------------------+            |
            +------------------------------------------------------------------+
```

## Instruction set

All RV32I instructions are supported, plus:

- the Zicsr instructions (`CSRRW/S/C` and their immediate forms)
- `ECALL`, `EBREAK` and `MRET`

`FENCE` and `FENCE.I` run as no-ops; the single hart has nothing to order.
Any other encoding raises an illegal-instruction exception.

## Pipeline (`wiscv_core`)

- **IF**
  - The PC selects the next fetch, in this order of priority: a trap or `MRET`
    redirect, then an execute-stage misprediction redirect, then the branch
    predictor's target, then PC+4.
  - Instruction fetch uses the valid/ready memory interface. While the memory
    has not answered, the fetch stage waits.
- **ID**
  - `wiscv_decoder` turns the instruction into a control structure (`ctrl_t`).
  - `wiscv_imm_gen` builds the immediate.
  - The register file is read here. Its write-through bypass means a value
    written back in the same cycle is seen at once.
- **EX**
  - `wiscv_alu` computes results and addresses.
  - Branches and jumps are resolved here and checked against the prediction
    made in IF.
  - A misprediction flushes IF and ID and redirects fetch, which costs two
    cycles.
- **MEM**
  - Loads and stores go to the data port.
  - Misaligned accesses, illegal instructions, `ECALL`/`EBREAK` and fetch
    faults are turned into precise traps here.
  - CSR instructions read and write here.
- **WB**
  - The result is written to the register file and the trace is emitted.

### Hazards and forwarding (`wiscv_hazard_unit`)

- Operands are forwarded into EX from the MEM stage and from the WB stage.
  MEM has priority because it holds the younger result.
- A load or CSR read followed at once by an instruction that uses its result
  stalls that instruction for one cycle. Such values are only known at the end
  of MEM.
- `x0` is never forwarded.
- A data-memory wait freezes the whole pipeline. The operands already forwarded
  into the stalled instruction are captured, so they are not lost when the
  producer moves on.

### Branch prediction (`wiscv_branch_predictor`)

- A branch target buffer with `BP_ENTRIES` (32) direct-mapped entries.
- Each entry has a full tag, a target and a 2-bit saturating counter.
- A new entry starts at "weakly taken".
- `JAL`/`JALR` entries are always predicted taken.
- The buffer is updated from EX with the real outcome.

## The single-cycle core (`wiscv_single_cycle_core`)

The single-cycle core is the textbook datapath without pipeline registers.
It is built from the same decoder, immediate generator, ALU, register file
and CSR unit as the pipeline. In one pass through the logic, an instruction:

1. is fetched at `pc`
2. is decoded and reads its operands
3. computes its result, branch outcome and address
4. accesses data memory if it is a load or store
5. commits: it writes `rd`, or takes a trap, or returns with `MRET`, and
   `pc` moves on

Two points differ from the pipelined core:

- **No register-file bypass.** The register file is used with `BYPASS = 0`.
  Here the value written at the clock edge is computed from the operands read
  in the same cycle, so a bypass would form a combinational loop.
- **Slow memories stretch the instruction.** When both memories answer in the
  cycle of the request, every instruction takes exactly one clock cycle. This
  is the case with `USE_CACHE = 0` and `MEM_LATENCY = 1`, or on cache hits.
  A slower memory stretches the instruction over several cycles. The fetched
  word is kept in a register while the data access waits, so both requests
  stay stable until they are answered.

Exceptions, their priority and the trace format are the same as in the
pipeline. Both cores can be checked against the same reference model.

## Exceptions and CSRs (`wiscv_csr`)

The following CSRs are implemented:

- `mstatus` (MIE/MPIE/MPP), `misa`, `mtvec`, `mscratch`, `mepc`, `mcause`,
  `mtval` and `mhartid`
- the 64-bit `mcycle` and `minstret` counters, with their user-mode read-only
  aliases `cycle`, `instret`, `cycleh` and `instreth`

Writing a read-only CSR or using an unknown one raises an illegal-instruction
exception.

When a trap is taken:

- `mepc`, `mcause` and `mtval` are written.
- Fetch goes to `mtvec`, which resets to `0x100`.
- All younger instructions are flushed, so the trap is precise.

The trapping instruction appears on the trace with `trap=1` and its cause.
`MRET` restores `mstatus.MIE` and returns to `mepc`. There are no interrupts.

## Caches and memory

`wiscv_cache` is a direct-mapped cache: `LINES` lines of `LINE_WORDS` words,
64 × 4 words (1 KiB) by default.

- **Read hit:** answered in the same cycle.
- **Read miss:** the line is refilled one word at a time, and then the request
  is answered. Counting the request cycle, a miss takes
  `LINE_WORDS × LATENCY + 2` cycles. That is 18 cycles at the defaults.
- **Writes:** write-through and no-write-allocate. A write is passed straight
  to memory. The cached word is updated if the line is present.

The SoC has one instruction cache and one data cache. Set `USE_CACHE = 0` to
remove both and connect the core directly to memory.

`wiscv_main_memory` is a unified word memory, 32768 words (128 KiB) by default.

- It has an instruction port and a data port.
- Each port answers after `LATENCY` cycles. `LATENCY = 1` gives a single-cycle
  memory: with `USE_CACHE = 0` the pipeline then never stalls on memory.
- A separate load port writes whole words.

All memory traffic uses one pair of structures:

- `mem_req_t {valid, we, be, addr, wdata}`
- `mem_rsp_t {ready, rdata}`

A requester holds a request unchanged until `ready` is seen. Because of this,
cache, memory and core can be put together in any order.

## Program loading (`wiscv_soc`)

- While `load_en` is high, the core is held in reset.
- Words presented on `load_we`/`load_addr`/`load_data` are written into main
  memory.
- When `load_en` is released, the core starts from `RESET_PC` (0) with cold
  caches and a cold predictor.

So new programs can be loaded without rebuilding the hardware.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `wiscv_soc` | `MEM_WORDS` | 32768 | main-memory size in words |
| | `MEM_LATENCY` | 4 | memory response time in cycles |
| | `CACHE_LINES`, `LINE_WORDS` | 64, 4 | cache geometry (both caches) |
| | `USE_CACHE` | 1 | 0 = core wired straight to memory |
| | `PIPELINED` | 1 | 0 = single-cycle core instead of the pipeline |
| | `BP_ENTRIES` | 32 | branch target buffer entries |
| | `RESET_PC`, `MTVEC_RESET` | 0, 0x100 | reset PC and trap vector |

## Verification

Each module has its own self-checking testbench in `tb/`, named
`<module>_tb.sv`. Each prints a `TB_RESULT checks=… failures=…` line.

- **Reference model:** `tb/wiscv_tb_pkg.sv` holds `rv_iss`, a simple RV32I +
  Zicsr instruction-set simulator. It also has instruction encoders and a
  random program generator.
- **Random programs:** the generator mixes the following, and its data region
  lies inside the memory:
  - ALU operations
  - loads and stores of every width, with forced misalignment
  - forward and backward branches
  - jumps and calls
  - CSR accesses
  - `ECALL`/`EBREAK`
  - illegal instructions
- **Core:** `wiscv_core_tb` runs random programs against memories with random
  wait states. It compares every retired instruction with the reference model
  and checks the one-cycle load-use stall.
- **Full SoC:** `wiscv_soc_tb` runs the SoC with its default parameters on 12
  random programs of 1000 blocks each. It compares the trace with the reference
  model and checks the cache miss latency. It counts how often each mechanism
  fires and fails if any of them never fires:
  - instruction-cache and data-cache misses
  - write-through stores
  - data-memory stalls
  - load-use stalls
  - forwarding from MEM and from WB
  - mispredictions and correctly predicted taken branches
  - traps, `MRET` and CSR accesses
  - program reloads through the load port
- **Single-cycle core:** `wiscv_single_cycle_core_tb` runs the same random
  programs with random wait states. With memories that always answer at
  once, it also checks that exactly one instruction retires per clock cycle.
  `wiscv_soc_single_tb` runs the SoC with `PIPELINED = 0`, both without caches
  on a 1-cycle memory (again exactly one instruction per cycle) and behind the
  default caches.
- **Cache-less SoC:** `wiscv_soc_nocache_tb` runs the SoC with
  `USE_CACHE = 0`, first with a 1-cycle memory and then with a 3-cycle memory.
  It checks the trace and the exact stall count of each.
- **LeNet-5 in C:** `wiscv_lenet_tb` runs the SoC at its default
  parameters on `tb/wiscv_lenet.hex`, the LeNet-5 digit-recognition network
  compiled from C for RV32I. The network is:
  - a 32×32 input
  - convolution with six 5×5 filters, then 2×2 max-pooling
  - convolution with sixteen 5×5 filters, then 2×2 max-pooling
  - dense layers 400→120→84→10
  - argmax

  Weights are 8-bit, with 32-bit biases. Each hidden layer is requantized to
  0..127 by a shift, ReLU and clamp. The 61,706 weights and biases are real
  arrays in memory, about 62 KiB. The program fills them at start-up from a
  xorshift generator, so the image file stays small; they are not a trained
  network. Multiplication is done in software. The testbench:
  - loads the program through the load port
  - checks all 14.9 million retired instructions against the reference model
  - recomputes the network in SystemVerilog and compares the ten scores and
    the class that the program stores

  The run takes 18.8 million cycles (CPI 1.26) and about 13 seconds in
  Verilator. The whole program, with its weights, activations and stack,
  uses about 74 KiB of the 128 KiB memory.

To simulate one testbench with Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/wiscv_pkg.sv \
    $(ls rtl/*.sv | grep -v pkg) tb/wiscv_tb_pkg.sv tb/wiscv_soc_tb.sv \
    --top-module wiscv_soc_tb
./obj_dir/Vwiscv_soc_tb
```

### Replacing a block

Each block can be swapped for another with the same ports, for example a
student's own hazard unit or a different predictor. Check a replacement from
the inside out:

1. the block's own testbench
2. `wiscv_core_tb`, which runs random programs on the core
3. `wiscv_soc_tb` and `wiscv_lenet_tb`, which run the whole system

A trace mismatch prints the PC, the instruction and the differing register
write. That points to the first instruction that went wrong.

## Design choices

The published description gives the architecture at the level of its parts
and what students do with them. It does not give sizes, timing or the exact
interfaces. The following are this design's own choices:

- the cache geometry and write policy
- the memory size and latency
- the predictor size and counter scheme
- the exact CSR set
- the trap vector
- how the single-cycle core handles memories slower than one cycle
- the valid/ready memory protocol

The memory size was chosen so that LeNet-5 with 8-bit weights fits, which
takes about 74 KiB in all. The memory also fits comfortably in the block RAM
of an Arty A7-35T.

Not included:

- **Board and host side:** the FPGA board wrapper (clocking, the host link
  that drives the load port) and the host-side tool flow are not included.
  The load port is brought out so that any link can drive it.
- **Interrupts:** these are not implemented.
- **Operating system:** there is no supervisor mode and no virtual memory,
  so Linux cannot run. Programs are bare-metal machine-mode code.

The published platform also has a "no core" mode, which produces the
reference output of a program. Here that role is played by the reference
model in the testbench package, not by hardware. The published design is
described as written in Verilog; this version uses SystemVerilog (packages,
structs, enums and assertions).
