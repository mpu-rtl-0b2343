# A near-bank SIMT core: RTL of one MPU core

GPUs are limited by off-chip memory bandwidth. A 3D-stacked DRAM has far more bandwidth
*inside* the stack, at each bank, than it can ever send out through its I/O. The MPU design
puts a SIMT (GPU-style) processor into the stack. Its parts are split by what they need:

- Control-heavy parts sit on the logic die at the bottom of the stack, in a **subcore**:
  fetch, warp scheduling, the SIMT stack, the scoreboard and the load/store unit.
- Data-heavy parts are copied next to the DRAM banks, in a **near-bank unit (NBU)**: a
  register file, an operand collector, an ALU, a memory controller and a load/store helper.

Each instruction then runs on whichever side keeps its data off the narrow TSV bus between
the dies. This repository holds the RTL of one such core. The core has:

- 4 subcores;
- 4 NBUs of 4 banks each;
- a 64 KB shared memory beside the NBUs;
- a 64-bit TSV bus per direction;
- an LSU-Remote that serves loads and stores from other cores.

All of it is SystemVerilog-2017, in `rtl/`. Self-checking testbenches are in `tb/`.

## The hybrid pipeline

A warp instruction is fetched, decoded and issued in a subcore (`rtl/subcore.sv`). Three
units then decide and run it:

1. **Instruction offload engine** (`instr_offload_engine.sv`). It picks the location in
   three prioritised steps:
   - Fixed far-bank opcodes stay on the logic die: branches, EXIT, TID, and global
     loads/stores, which need the subcore's LSU.
   - Otherwise the instruction's 2-bit location hint decides.
   - Without a hint, the **register track table** (`reg_track_table.sv`) decides. If every
     source register has a valid near-bank copy, the instruction runs near-bank.

   It then works out where each operand must be:
   - For `ld/st.global`, the address register is needed far-bank and the store-data register
     near-bank.
   - Shared-memory instructions need all their registers near-bank.
   - All other instructions need their registers where the instruction runs.
2. **Register move engines** (`regmov_engine_fb.sv` on the logic die, `regmov_engine_nb.sv`
   in the NBU). They copy each register that is not valid where it is needed across the
   TSVs. Then the track table is updated: a move adds a valid copy, and a write leaves only
   the written copy valid.
3. **Dispatch.** The instruction goes one of three ways:
   - to the far-bank operand collector and ALU;
   - to the LSU;
   - as an `M_OFFLOAD` message to the NBU under the subcore. There the near-bank operand
     collector, ALU (or the shared memory) and writeback run it. The NBU then returns
     `M_DONE`, so the subcore can commit and clear the scoreboard.

Registers 0–15 of a warp have a near-bank slot; registers 16–31 live only far-bank. The
register files therefore hold:

- far-bank: 8 warps × 32 registers × 128 B = 32 KB;
- near-bank: 8 warps × 16 registers × 128 B = 16 KB.

An instruction that names a register above 15 always runs far-bank.

## Global loads and stores

The subcore LSU (`lsu.sv`) forms the 32 lane addresses and then takes these steps:

1. **Range check.** Lanes whose address belongs to another core are sent out on the
   `rem_*` network port as one request.
2. **Uniformity check.** Are all lanes active?
3. **Coalescing check.** Is lane *l* at leading + 4·*l*?
4. **Placement check.** Do the data and the register target the same NBU?
5. **Offload.** If all hold, only the leading address, register number and NBU id cross the
   TSVs (`M_LDG_OFF`/`M_STG_OFF`). The NBU's LSU-Extension (`lsu_extension.sv`, path 3-b)
   restores the address list, reads or writes the 4–5 DRAM columns involved, and writes the
   near-bank register file directly.
6. **Otherwise,** the LSU sends one DRAM word transaction per lane. The LSU-Extension serves
   each one (path 3-a). The LSU gathers the words and writes the near-bank register file with
   a register-write message.

`lsu_remote.sv` serves requests arriving from other cores the same way, as word transactions.

Address map (byte address, 32 bits):

| bits   | field                        |
|--------|------------------------------|
| 31..28 | core                         |
| 27..26 | NBU                          |
| 25..24 | bank                         |
| 23..10 | row (16 MB per bank)         |
| 9..5   | 256-bit column               |
| 4..0   | byte                         |

## Memory controller and multiple row buffers

Each NBU has a controller (`mem_ctrl.sv`) with:

- an 8-entry request queue;
- **FR-FCFS** scheduling: the oldest ready row hit first, otherwise the oldest request's ACT
  or PRE;
- an **open-page** policy;
- refresh every tREFI, which precharges everything and blocks for tRFC.

Each bank has 4 subarrays, each with its own row buffer and row latch. Consecutive rows map
to consecutive subarrays (`subarray = row mod 4`), so up to four rows of a bank are open at
once. Warps streaming over neighbouring rows then stop evicting each other's row. Set
`NUM_ROWBUF_P = 1` to get a conventional bank.

Timings are in core cycles (1 GHz):

| tRCD | tCCD | tRTP | tRP | tRAS | tRFC | tREFI |
|------|------|------|-----|------|------|-------|
| 14   | 2    | 4    | 14  | 33   | 350  | 3900  |

The DRAM array itself is not RTL. The controller drives a command bus
(`dram_cmd/bank/sa/row/col/wdata/wstrb`, with `rd_valid/rd_data` coming back) that the top
exposes per NBU.

## TSV bus and messages

All traffic between the dies is a `tsv_msg_t` (`mpu_pkg.sv`). There is one arbiter per
direction (`tsv_arbiter.sv`):

- It grants round robin.
- A message of *b* bits holds the bus for ceil(*b*/128) cycles, because the 64-bit bus runs
  at twice the core clock.
- It is delivered whole at the far end.

Message sizes count a 64-bit header plus payload. A register (1024 bits) therefore costs
9 cycles, and an offloaded coalesced load costs 1. This cost gap is the reason for the
offload engine.

## Shared memory, SIMT stack, scheduling

- `shared_memory.sv` is 64 KB in 32 word-interleaved banks. The four NBUs share it
  round-robin.
  - Lanes reading the same word are served together.
  - Other lanes that meet in a bank wait. A conflict-free access takes 2 cycles.
- `simt_stack.sv` keeps a per-warp reconvergence stack. A branch carries both its target
  and its reconvergence pc. A divergent branch pushes the not-taken and taken sides. An entry
  pops when its pc reaches the reconvergence pc.
- `warp_scheduler.sv` selects among ready warps round robin. `scoreboard.sv` tracks pending
  destination registers.

## Instruction set (this design's own)

Instructions are 64 bits: `op[6] dst[5] src0[5] src1[5] hint[2] spare[9] imm[32]`.

- Integer ALU: ADD SUB MUL AND OR XOR SHL SHR MIN MAX ADDI MULI SLT MAD MOVI TID.
- Memory: `LDG/STG [src0+imm]`, `LDS/STS` (shared memory).
- Control:
  - `BRA src0`: lanes with a non-zero src0 jump to `imm[15:0]`, and both sides reconverge
    at `imm[31:16]`.
  - `EXIT`.

There is no floating point.

## Simulating

Every testbench is self-checking and ends with `TB_RESULT checks=N failures=M`.

For example, the end-to-end test at full default size:

```
verilator --binary --timing -Wno-fatal --top-module mpu_core_tb \
    rtl/mpu_pkg.sv $(ls rtl/*.sv | grep -v mpu_pkg) tb/dram_bank_model.sv tb/mpu_core_tb.sv
./obj_dir/Vmpu_core_tb
```

`tb/mpu_core_tb.sv` loads a 42-instruction kernel and runs 8 warps on each subcore. The
kernel exercises:

- an AXPY-like multiply-add near-bank;
- shared memory with and without bank conflicts;
- a divergent if/else;
- an uncoalesced load;
- register moves in both directions;
- a load from another core's address range, looped back through LSU-Remote.

The test checks every result word in the DRAM models (6162 checks in about 13,400 kernel
cycles). It also checks that each mechanism fired at least once, using the core's event
counters (`stats`):

- near-bank offloads;
- register moves;
- coalesced offloads and splits;
- remote requests;
- divergence;
- row hits and activations;
- refreshes;
- shared-memory accesses and conflicts;
- TSV traffic.

`tb/dram_bank_model.sv` is the behavioural bank model. It also flags protocol errors: a
column command to a closed or wrong row, or a refresh with rows open.

Per-block testbenches:

- `register_file_tb`
- `vector_alu_tb`
- `reg_track_table_tb`
- `scoreboard_tb`
- `simt_stack_tb`
- `warp_scheduler_tb`
- `icache_tb`
- `tsv_arbiter_tb`
- `shared_memory_tb`
- `mem_ctrl_tb`
- `operand_collector_tb`
- `regmov_engine_nb_tb`

The offload engine, the far-bank register move engine, the LSU, the LSU-Extension,
LSU-Remote, the subcore and the NBU are tested through `mpu_core_tb`.

## Where this departs from the full design

- **Integer only.** The ALUs have no floating-point path, so floating-point kernels cannot
  run as written.
- **Outside the core.** The network interface unit, the mesh router, the off-chip links and
  the 16-core processor around this core are not built. Remote traffic leaves and enters the
  core through the `rem_*` and `lr_*` ports.
- **Not RTL.** The DRAM array and the TSVs are physical parts. The array is replaced by the
  simulation model.
- **Own choices.** Where the source design is silent, this RTL makes its own choices:
  - the number of warps (8 per subcore) and the register split;
  - the instruction encoding;
  - the message format;
  - queue depths;
  - the shared-memory banking;
  - the address map.
- **One instruction per warp.** A subcore issues at most one instruction per cycle. An
  instruction that writes a register blocks its warp until commit, through the scoreboard.
  Register moves are serial.
