# SSR: a five-stage RISC-V pipeline without the load-use bubble

In a classic five-stage pipeline (IF, ID, EXE, MEM, WB) a value produced by an
ALU instruction can be forwarded to the next instruction as soon as EXE has
computed it. A load is different: its value only exists once the data memory
has answered, at the end of MEM. If the very next instruction needs that value
(`lw a5,0(a5)` followed by `beqz a5,...`), a hazard detector that lives in ID
cannot forward it in time, so the usual answer is an interlock: hold the
consumer in ID for one cycle and send a bubble (a nop) down the pipe.

SSR ("a stall scheme reducing bubbles", Su, Li and Yuan) removes that bubble.
The consumer is allowed to enter EXE with a stale operand. In that cycle the
load is in MEM and its data is arriving, so a small second detector in EXE,
the *ld hazard detector*, notices the match and feeds the load data straight
into the ALU inputs. The published scheme was evaluated inside the Rocket core;
this repository gives it as synthesizable SystemVerilog in a compact RV32I
five-stage pipeline, `ssr_core`, with self-checking testbenches for every unit
and for the whole core.

## How a load-use pair flows

```
cycle        t            t+1                    t+2
IF           ...          ...                    ...
ID           beqz a5      (next)                 ...
EXE          lw a5        beqz a5  <-- a5 from MEM (ld hazard detector)
MEM          ...          lw a5    --> data memory answers
WB           ...          ...                    lw a5
```

* Cycle t: `beqz` is in ID, `lw` in EXE. The ID hazard detector sees that the
  instruction in EXE writes `a5` but is a load, so it has nothing to forward.
  It does **not** stall. `beqz` enters ID/EX with whatever older value of `a5`
  it could find (register file or an older in-flight result).
* Cycle t+1: `beqz` is in EXE, `lw` in MEM. The ld hazard detector compares
  ID/EX's source registers with EX/MEM's destination, finds a load, and
  replaces the operand with the word the load is reading now. `beqz` resolves
  in the same cycle.

With the interlock, `beqz` would have reached EXE one cycle later. In this
core no instruction ever waits for a load.

## The two hazard detectors

### ld hazard detector (EXE) — `ssr_ld_hazard`

For each source operand independently (rs1 and rs2):

| condition on ID/EX source `rs` and EX/MEM | operand used in EXE |
|---|---|
| `rs != 0`, EX/MEM valid and writes `rd`, `rs == rd`, EX/MEM is a load | load data returned by the memory in MEM |
| same, but EX/MEM is not a load | the ALU result held in EX/MEM |
| otherwise | the operand latched into ID/EX |

This is the scheme's rule as published. The second row repeats a value the ID
detector already forwarded one cycle earlier, so it never changes the result;
it is kept because it is part of the rule, and it costs one more mux input.
rs2 covers store data as well, so `lw x5; sw x5,...` also runs back to back.

### ID hazard detector — `ssr_id_hazard`

For each source register of the instruction in ID, it takes the youngest
in-flight producer: EXE (its ALU/link result), then MEM (the ALU result, or
for a load the data being read this cycle), then WB, then the register file.
A load in EXE is skipped: its data does not exist yet, and the ld hazard
detector will fix the operand one cycle later. This is where the classic design
would raise its load-use stall; here there is no such signal at all. The unit
still reports the case (`load_use_deferred`) so it can be counted.

The ID detector is still needed. Only it can see an instruction in WB writing
the register that ID is reading in the same cycle; moving every check into EXE
would need a third register-file read port.

## What else the pipeline does

* **ISA:** RV32I integer instructions: LUI, AUIPC, JAL, JALR, branches, byte,
  halfword and word loads and stores, and the register and immediate ALU
  operations. FENCE, ECALL, EBREAK and CSR instructions execute as nops. There
  are no traps or interrupts, and misaligned accesses are not checked.
* **Control flow:** fetch runs sequentially. Branches and jumps resolve in EXE.
  A taken one loads the target into the PC and empties IF/ID and ID/EX, so it
  costs two cycles.
* **Memory stall:** the data memory may hold `dmem_ready` low, as a cache does
  on a miss. While it does, the PC and all four pipeline registers hold. No
  hazard state needs saving: when the access completes, the ld hazard
  detector sees the same ID/EX and EX/MEM contents as before and forwards
  correctly.
* **Timing:** with no load-use bubbles, instruction *k* (counting from 0)
  retires in cycle `k + 4 + 2·(taken branches/jumps before it) + (memory-stall
  cycles before it)`, counting from the first cycle after reset. Both
  core-level testbenches check this for every instruction.
* **Cost:** the bubble is traded for a longer combinational path: data-memory
  read → ld-hazard mux → ALU → branch decision, or → ID bypass → ID/EX. The
  data memory must answer within the MEM cycle (`dmem_rdata` is combinational
  on `dmem_addr`). A cache with a registered output would have to return its
  data early enough in the cycle for this to work.

## Interface of `ssr_core`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `imem_addr` | out | 32 | fetch address (the PC) |
| `imem_rdata` | in | 32 | instruction at `imem_addr`, same cycle |
| `dmem_req`, `dmem_we` | out | 1 | data access / write in MEM |
| `dmem_addr` | out | 32 | word-aligned byte address |
| `dmem_wstrb` | out | 4 | byte enables of a write |
| `dmem_wdata` | out | 32 | store data, already in its byte lanes |
| `dmem_rdata` | in | 32 | word at `dmem_addr`, same cycle |
| `dmem_ready` | in | 1 | the access completes at this clock edge; low stalls the pipeline |
| `retire_valid`, `retire_pc`, `retire_rd_we`, `retire_rd`, `retire_wdata` | out | | one pulse per instruction leaving WB, in program order |
| `events` | out | `events_t` | per-cycle flags: load-use pair passed, SSR bypass used, EX/MEM bypass, ID bypass from EXE/MEM/WB, memory stall, redirect |

Parameter: `RESET_PC` (default 0).

The instruction and data memories (the caches in the original evaluation)
are outside the core. The testbenches model them as arrays.

## Source files

| file | content |
|---|---|
| `rtl/ssr_pkg.sv` | opcodes, ALU operations, the decoded control bundle `ctrl_t`, pipeline-register structs, `events_t` |
| `rtl/ssr_core.sv` | the pipeline: stage registers, operand selection, branch resolution, stall, retire and event ports |
| `rtl/ssr_if_stage.sv` | PC and IF/ID register |
| `rtl/ssr_decoder.sv` | RV32I decoder |
| `rtl/ssr_regfile.sv` | 32 × 32 register file, two read ports, one write port |
| `rtl/ssr_id_hazard.sv` | ID hazard detector (bypass to ID, no load-use stall) |
| `rtl/ssr_ld_hazard.sv` | ld hazard detector (SSR bypass into EXE) |
| `rtl/ssr_alu.sv` | ALU and branch comparator |
| `rtl/ssr_lsu.sv` | MEM-stage byte lanes, load extension, stall request |
| `tb/rv32_tb_pkg.sv` | instruction encoders and `rv32_iss`, an instruction-at-a-time reference model |
| `tb/*_tb.sv` | one self-checking testbench per module, plus three core-level ones |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog.

* Unit testbenches compare each block with an independent model on random
  and directed inputs. `ssr_ld_hazard_tb` evaluates the published rule
  literally and includes the `lw a5` / `beqz a5` pair. `ssr_id_hazard_tb`
  walks the stages youngest to oldest. The others check the register file,
  ALU, decoder, load/store unit and fetch stage.
* `ssr_core_tb` runs a random program of about 600 instructions. A quarter of
  it is load-use pairs, where the load feeds an ALU op, a branch, a store's data
  or both operands. The rest is forward branches of all six kinds, JAL,
  AUIPC+JALR, LUI and dependent ALU chains. The data memory stalls at random on
  about a quarter of its accesses. Each retired instruction is compared with
  the reference model, and so is the final data memory. The retire cycle
  equation above is checked for every instruction. The test fails if any
  mechanism never occurred: load-use pair, SSR bypass, EX/MEM bypass, ID bypass
  from each stage, memory stall or redirect.
* `ssr_core_fig_tb` replays the two textbook pairs, `add a1,a2,a3; add
  a4,a1,a3` and `lw a5,0(a5); beqz a5,pc+1498`, one cycle at a time. It checks
  that `add a4` takes `a1` from EXE. For the load pair it checks three cycles in
  turn: no stall while `beqz` is in ID and `lw` in EXE; the load data is
  forwarded while `beqz` is in EXE and `lw` in MEM; and `beqz` follows `lw`
  into MEM and WB with no nop between them. A second pair checks that a branch
  is taken on a forwarded zero.
* `ssr_core_kernel_tb` runs two load-heavy loops. The first walks a shuffled
  64-node linked list: each node's value feeds an add, and its next pointer
  feeds the loop branch. The second copies 48 words, storing each word right
  after it is loaded. It checks the results, the 176 load-use pairs and the
  cycle equation. It also prints how many cycles a one-bubble interlock would
  have needed: in a typical run, 962 cycles against 1138.

Running one with Verilator 5, from the repository root (`-y rtl` lets
Verilator find each module in `rtl/<name>.sv`; the two packages are named
explicitly because they must be read first):

```
verilator --binary --timing --assert -y rtl \
    rtl/ssr_pkg.sv tb/rv32_tb_pkg.sv tb/ssr_core_tb.sv --top-module ssr_core_tb
./obj_dir/Vssr_core_tb +verilator+rand+reset+2
```

Replace `ssr_core_tb` with any other testbench name. The random tests draw
from `$urandom`. To get a different program or input stream, add
`+verilator+seed+N` to the run.

## Departures from the published design, and limits

* **Host core.** The scheme was published as a modification of the Rocket
  core: Rocket's `id_load_use` interlock was forced off, and a load-data
  source was added to the bypass muxes at the ALU inputs. Rocket itself, its
  caches and the rest of the SoC are not reproduced here. The same mechanism
  sits in a small generic pipeline built to match the scheme's five-stage
  figures, so cycle counts are not comparable with Rocket's.
* **Published results not reproduced.** The authors report Dhrystone, area and
  power for Rocket in a 130 nm process at 500 MHz: 6.9 % fewer cycles, about
  8 % more dynamic power and 6 % more area. Their Dhrystone build was for
  Rocket's 64-bit configuration, which this RV32I core cannot run. Area, power
  and frequency depend on the target library and were not evaluated.
* **Own choices** (the scheme does not specify them): RV32I; rule applied to
  both source operands; EX/MEM valid bit part of the "writes rd" term; ID
  bypass priority EXE > MEM > WB; load data forwarded into ID from MEM;
  single-cycle combinational memories with a ready/stall signal; branch
  resolution in EXE with a two-cycle penalty; reset values; the retire and
  event ports.
* **No baseline.** The classic interlock pipeline the scheme is compared with
  is not included. Its cycle count is the SSR count plus one per load-use pair
  (`events.load_use`), which the kernel testbench prints.

## Changing it

* The detectors are small combinational modules with plain ports. A longer
  pipeline needs one more compare-and-mux level in `ssr_ld_hazard` for each
  extra stage between EXE and the stage where load data appears.
* To put a cache with a registered output in front of the core, either let it
  answer within the cycle (address in EX/MEM, data before the clock edge) or
  add a stage. The bypass then has to take data from wherever the load's
  value first exists.
* `events` is intended for performance counters. Leave it open if it is not
  needed; synthesis removes the logic.
