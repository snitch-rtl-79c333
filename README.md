# Snitch cluster in SystemVerilog

## Main idea

Snitch is a tiny integer core whose main job is to keep a double-precision
FPU busy. The integer core is only a single-stage RV32I pipeline. Two small ISA
extensions let it hand the floating-point side long runs of work without
taking part in every instruction:

- **Stream semantic registers (SSR).** These turn reads and writes of `ft0`
  and `ft1` into memory streams. Loads and stores disappear from the inner
  loop.
- **FREP.** This repeats a block of FP instructions from a small sequence
  buffer. The integer core issues the loop once and is then free to run its
  own code. This gives a "pseudo dual issue": integer and FP instructions
  retire in the same cycle.

Eight such cores share a banked 128 KiB scratchpad (TCDM). The cores of a hive
also share an instruction cache and a multiply/divide unit.

## Integer core (`snitch`)

- The core fetches, decodes, executes and writes back in one cycle.
- Each integer register has one scoreboard bit. An instruction waits only if
  it reads a register that still has a load, a mul/div or an FP result pending.
- It supports RV32I, or RV32E when `RVE=1`. It has the CSRs `mhartid`,
  `mcycle` and `minstret`, and CSR `0x7C0` bit 0 switches the SSR semantics on.
- `WFI` sleeps until the cluster's wake-up register sends a pulse.
- Instructions the core does not execute itself are offloaded on an
  accelerator port along with their integer operands:
  - M-extension instructions go to the hive's shared mul/div unit
    (`snitch_muldiv`). A multiply takes two cycles. A divide is bit-serial and
    takes up to about 38 cycles.
  - FP instructions go to the FPU sequencer.
  - For `FLD`/`FSD` the core computes the address and sends it with the
    instruction.
- The LSU (`snitch_lsu`) keeps up to four requests in flight with in-order
  responses.
  - It passes RISC-V AMOs and LR/SC through to the memory system.
  - A second instance in FP mode serves the FP side and NaN-boxes single
    loads.
- The integer register file (`snitch_regfile`) has two read ports and one
  write port, with `x0` tied to zero.

## FPU sequencer and FREP (`snitch_sequencer`)

FREP uses the custom-0 opcode with this field layout:

| Bits | Field |
|------|-------|
| 7 | outer/inner mode |
| 11:8 | stagger mask {rd, rs1, rs2, rs3} |
| 14:12 | stagger count |
| 19:15 | register that holds the repetition count |
| 23:20 | number of body instructions minus one |

The sequencer sits on the offload path and has three lanes:

- FREP instructions enter a 4-entry configuration queue.
- The next *max_inst* FP instructions are written into the 16-entry sequence
  buffer.
- All other FP instructions use the bypass lane.

Issue and repetition work as follows:

- The sequencer issues buffered instructions as soon as they arrive. The first
  iteration therefore overlaps with filling the buffer.
- Outer mode repeats the whole body. Inner mode repeats each instruction
  before moving on to the next.
- With staggering, the masked register fields of iteration *r* are increased
  by *r* mod (count+1).
- The bypass lane waits while a loop is active or queued, so the FP side sees
  program order.

## Stream semantic registers (`snitch_ssr`)

- Each core has two SSR lanes, mapped to `ft0` and `ft1`.
- A lane has four nested loops with a bound and a stride each, plus a 4-entry
  data queue. Read requests are issued only when a queue slot is free, as
  credit-based flow control.
- The lanes are configured through core-private memory-mapped registers at
  `0x1003_0000`. Each lane has a 128-byte window, and the lane is selected by
  address bit 7. The 32-bit words are:
  - 2+d: bound of loop d;
  - 6+d: stride of loop d;
  - 24+d: read pointer, which starts a (d+1)-dimensional read stream;
  - 28+d: write pointer, which starts a write stream.
- A stride is the jump taken when its loop advances.
- Configuration first lands in a shadow set, which becomes active when the
  lane is idle. The next stream can therefore be set up while the current one
  runs.
- An instruction that reads `ft0` twice pops the stream once.

## FP subsystem (`snitch_fpss`, `snitch_fp_regfile`)

- The FP subsystem decodes the offloaded instruction and tracks FP registers
  in its own scoreboard.
- Operand reads and result writes on `ft0`/`ft1` are redirected to the SSR
  lanes while SSRs are enabled.
- It sends arithmetic to the FPU port, and loads and stores to the FP LSU.
- Results that go to an integer register (compares, conversions, moves)
  return over the accelerator response.
- The FP register file has 32×64 bits, three read ports and two write ports
  (FPU and LSU). On a collision the FPU wins.
- The FPU itself is not part of the design. Each core complex has an FPU port
  with a tag, and a behavioural double-precision model (`tb/fpu_model.sv`)
  stands in for it in simulation.

## Core complex, hive and instruction caches

- `snitch_cc` holds one core, its sequencer, FP subsystem, two SSR lanes and
  an L0 instruction cache.
  - It has two data ports into the TCDM. Port 0 is shared by the integer
    LSU, the FP LSU and SSR lane 0. Port 1 belongs to SSR lane 1.
  - It also has an external port for everything outside the TCDM.
  - The helper modules `snitch_mem_mux` and `snitch_mem_demux` do the merging
    and routing.
- `snitch_icache_l0` is a private, fully associative, flip-flop based cache:
  4 lines of 128 bits, one-cycle hit, FIFO replacement.
- `snitch_hive` groups the core complexes with the shared 8 KiB L1
  instruction cache and the shared mul/div unit.
  - The L1 cache (`snitch_icache_l1`) is direct mapped.
  - When several cores miss on the same line, it coalesces the requests into
    one refill.

## TCDM and atomics

- The 128 KiB TCDM has 32 banks of 512×64 bits (`tcdm_bank`). That is two
  banks per initiator port, with two ports per core.
- Banks are word-interleaved on 64-bit words.
- `tcdm_interconnect` is a fully connected, combinational crossbar with
  round-robin arbitration per bank.
  - Responses come one cycle after the grant.
  - It reports the number of conflicts per cycle.
- Each bank has an atomic unit (`tcdm_amo`) in front of it.
  - An AMO reads the word, and the next cycle writes the result and returns
    the old value. The bank is blocked during that second cycle.
  - LR/SC uses one reservation per bank. The first holder keeps the
    reservation until its SC, or until any write to the reserved word.

## Cluster (`snitch_cluster`)

Address map:

| Region | Address |
|--------|---------|
| TCDM | `0x1000_0000` |
| Cluster peripherals | `0x1002_0000` |
| SSR configuration | `0x1003_0000` |
| Boot address, external memory behind the master port | `0x8000_0000` |

The cluster crossbar (`snitch_cluster_xbar`) has these ports:

- Masters: the core external ports, the L1 refill port and an external slave
  port. Through the slave port, a host can load data into the TCDM.
- Targets: the peripherals, the TCDM (through one extra interconnect port) and
  the external master port.

The peripherals (`snitch_cluster_periph`) are 64-bit registers:

| Offset | Register |
|--------|----------|
| 0x00 | TCDM start |
| 0x08 | TCDM end |
| 0x10 | number of cores |
| 0x18 | cycle counter |
| 0x20 | FPU operation counter |
| 0x28 | bank-conflict counter |
| 0x30 | retired-instruction counter |
| 0x38, 0x40 | scratch registers |
| 0x48 | wake-up mask; writing it sends a one-cycle pulse to each selected core |

## Departures from the paper

- **Cluster shape.** The text describes two hives of four cores. The die-shot
  caption describes one hive of eight cores. The defaults follow the caption:
  `NrHives=1`, `NrCoresPerHive=8`. Two hives are a parameter change.
- **No FPU.** The FPU (FPnew) is only named in the paper. The cluster exposes
  one FPU port per core instead.
- **No AXI.** The cluster crossbar and the L1 refill use the same simple
  request/response link as the cores, with single beats, instead of AXI
  bursts. There is no DMA and no multi-cluster system crossbar.
- **Own choices where the paper gives no numbers or encodings:**
  - the FREP field layout beyond what the figure shows;
  - the SSR register map and queue depth;
  - the peripheral offsets;
  - L0 size and replacement policy, and L1 organisation;
  - the LR/SC reservation policy;
  - the address map;
  - the outstanding-request limits.
- **Divide timing.** Divides take up to about 38 cycles rather than exactly 32.
  The extra cycles are control overhead around the 32 bit-serial steps.

## Simulation with Verilator

Every testbench is a self-checking top in `tb/`. Each one prints a
`TB_RESULT` line and ends with `$finish`. For example, to run the end-to-end
cluster test:

```
verilator --binary --timing -Wno-fatal --top-module tb_snitch_cluster -Irtl -Itb \
  rtl/snitch_pkg.sv tb/rv_asm_pkg.sv $(ls rtl/*.sv | grep -v snitch_pkg) \
  tb/fpu_model.sv tb/mem_model.sv tb/tb_snitch_cluster.sv -o sim
./obj_dir/sim +verilator+seed+$RANDOM
```

To run a block test, replace the top module and the last file with, for
example, `tb_snitch_sequencer`. Tests with an FP side or external memory also
need `tb/fpu_model.sv` and `tb/mem_model.sv`:

- `tb_snitch_cc`
- `tb_snitch_fpss`
- `tb_snitch_hive`
- `tb_snitch_cluster`

The programs are built in SystemVerilog with the encoder functions in
`tb/rv_asm_pkg.sv`, so no toolchain or external file is needed. The
end-to-end test does the following:

- It runs a staggered FREP dot product on all eight cores with SSR streams.
- In parallel, the cores run mul/div work and LR/SC and AMO counters.
- It checks the results.
- It checks that every mechanism was exercised: cache misses, wake-ups,
  stalls, sequencer issues, dual-issue cycles, FPU operations, divider use and
  bank conflicts.
- It checks the FREP issue rate.
