# Mestra: a virtualized CGRA with live kernel migration

A coarse-grain reconfigurable array (CGRA) is a grid of small processing elements (PEs). Each PE
runs one configured operation, and the PEs pass data tokens to their neighbours. A large array is
hard to fill with one kernel. This design therefore cuts the array into equal **regions**
(vCGRA regions) that a host-side hypervisor hands out to different kernels at the same time.
Adjacent regions can be **merged** when one kernel needs more than one region.

Kernels finish in any order, so the free regions become scattered. A kernel that needs a
rectangle of several regions may then find no place even though enough regions are free. The
remedy is to **migrate** a running kernel to another region. Two ways are supported:

- **Stateless migration.** Stop the kernel, load its configuration somewhere else, and start it
  again from the beginning. Work already done is lost. This is wrong for a kernel that overwrites
  its own input, such as `Y = a*X + Y`.
- **Stateful migration.** Stop the kernel and take a *snapshot* of every register that holds
  progress: loop counters, tokens in flight, partial results and the region's local memory.
  Then configure another region, reload the snapshot into it and resume exactly where the
  kernel stopped.

This repository holds synthesizable SystemVerilog for the array, its per-region controller and
command interface, the memory path and a small shell. It also has testbenches that run real
kernels through the whole flow, including both kinds of migration.

## Organisation

```
 host (PCIe/DMA, not included)                     global memory (DDR, not included)
        |  register port                                     ^  one tagged req/rsp port
        v                                                    |
 +--------------------------- shell --------------------------------------+
 |  register decode (region window + MERGE/INFO/FREE)   shell_mem_arbiter  |
 +------------------------------------------------------------------------+
        |  16 x region register bus                          |  16 x region memory port
 +--------------------------- cgra_fabric (4 x 4 regions) ----------------+
 |  vcgra_region  vcgra_region  vcgra_region  vcgra_region                |
 |  ...  border links between neighbours are opened by merge bits ...     |
 +------------------------------------------------------------------------+
```

The defaults give 4 x 4 regions of 3 x 5 PEs, or 240 PEs. Each region (`vcgra_region`)
contains:

```
   col:   0    1    2    3    4
 row 0:  FC   FC   FC   FC   FC        FC = function-compute PE (fc_pe)
 row 1:  FC   LS   FC   LS   FC        LS = load/store PE (ls_pe)
 row 2:  FC   FC   FC   FC   FC
```

- **Mesh.** A mesh of point-to-point links connects every PE to its N/E/S/W neighbour. Links
  on the region border leave the region as *edge links*.
- **`ffa_rf`.** A register file through which the host sends commands and reads status.
- **`region_ctrl`.** The controller. It runs the commands and copies configuration, snapshots
  and TCDM images word by word.
- **`tcdm`.** A local data memory of 1024 words.
- **`region_mem_router`.** Merges the memory requests of the controller and of both LS PEs. It
  sends each request to the TCDM or to the region's global-memory port.

### Tokens and links

A token is 32 bits of data plus one **predicate** bit. The predicate travels beside the data as a
shadow network.

Every link is elastic: `valid`/`ready`, and a token moves on a cycle where both are high. A PE's
`in_ready` depends only on its own registers, never on its outputs. This keeps long PE chains
free of combinational paths through the array, at the cost of one token every other cycle per
PE. A steady stream through an FC PE gives one result per 2 cycles (40 results in about 82
cycles in the tests).

## Function-compute PE (`fc_pe`)

An FC PE has two operand registers **A** and **B**, an ALU, a result register **R** and a
4-word register file **RF0..RF3**. Configuration word 0 selects:

| bits    | field      | meaning |
|---------|------------|---------|
| 3:0     | `op`       | NOP, PASS, ADD, SUB, MUL, AND, OR, XOR, SHL, SRA, MIN, MAX, LT, GT, EQ (0..14) |
| 6:4     | `src_a`    | operand A source: 0..3 = input from N/E/S/W, 4 = RF1, 5 = RF2, 6 = RF3, 7 = RF0 |
| 9:7     | `src_b`    | operand B source, same code |
| 13:10   | `out_mask` | directions that receive the result: bit 0 N, 1 E, 2 S, 3 W |
| 14      | `pred_en`  | predicated select (below) |
| 15      | `acc_en`   | accumulate into RF0 |
| 31:16   | `acc_len`  | results folded per emitted token |

Configuration words 1..4 are the initial values of RF0..RF3.

**Firing.** A PE fires when every operand that comes from a link is present and R is free. A
register-file operand is always present. A and B must not name the same input link.

**Fork.** With several `out_mask` bits set, R is offered to each selected neighbour. Each
neighbour takes it when it is ready, and a *sent* mask records which copies have gone. R is
free again only when every copy has been taken. So one slow consumer never makes another
consumer see a token twice.

**Predication.** The compare operations (LT, GT, EQ) pass A as data and set the result's
predicate. With `pred_en`, a token whose A predicate is 0 is not computed on: the PE emits
operand B with predicate 0. A relu is therefore `GT x, 0` followed by a predicated
`PASS x | else 0`.

**Accumulation.** With `acc_en`, each result is written back to RF0, which is fed back as an
operand. After `acc_len` results the PE emits the sum and reloads RF0 from its configured
initial value. A dot product of length L is then `MUL x, y` followed by `ADD in, RF0`.

**Previous result.** RF3 always holds the last result.

**Snapshot state.** Eight words per PE:
- 0: flags (valid and predicate of A, B and R, the sent mask, the accumulation count)
- 1–3: A, B, R
- 4–7: RF0..RF3

## Load/store PE and address generator (`ls_pe`, `agu`)

An LS PE streams between memory and the mesh. It has a **load** path (memory to an output
mask) and a **store** path (one configured input link to memory). Both run at once, each with
its own port into the region router and one request outstanding.

Each path is driven by an `agu` that walks a three-level affine loop:

```
addr = base + i0*stride0 + i1*stride1 + i2*stride2
for i2 < bound2, for i1 < bound1, for i0 < bound0     (bound 0 counts as 1, 16-bit bounds)
```

The LS configuration is:
- word 0: `ld_en` bit 0, `st_en` bit 1, `st_src` bits 3:2, `out_mask` bits 7:4
- words 1–7: load descriptor (base, stride0..2, bound0..2)
- words 8–14: store descriptor (same order)

Addresses are 32-bit *word* addresses. Bit 31 set selects the region's TCDM; otherwise the
access goes to global memory.

The AGU counters advance only when an access has **committed**:
- A load commits when its data has been handed to every consumer.
- A store commits when the memory has acknowledged the write.

Those counters are what a snapshot saves. A restored kernel therefore neither skips nor repeats
an element. The snapshot also saves a loaded token that was only partly forked.

**Halting.** With `run` low, no new request starts. Requests already issued complete, and
`quiet` goes high once nothing is in flight.

**Done.** `done` means every enabled path has finished its loop. `progress` counts committed
stores.

## Region controller (`region_ctrl`) and command interface (`ffa_rf`)

### States and commands

| state      | accepted commands | effect |
|------------|-------------------|--------|
| IDLE       | CONFIGURE         | load the configuration (and, with *restore*, a snapshot), then go to CONFIGURED |
| CONFIGURED | EXECUTE           | go to EXECUTING; PEs run |
| EXECUTING  | HALT              | PEs stop; wait for the LS PEs to go quiet; go to HALTED. The kernel finishing gives DONE |
| HALTED     | SNAPSHOT, EXECUTE, RESET | SNAPSHOT: SNAPSHOT state while saving, then back to HALTED. EXECUTE: resume. RESET: release, go to IDLE |
| DONE       | RESET             | go to IDLE (region available again) |

- **Illegal commands.** Any other command, or any command while the copy engine is busy, is
  refused. It raises the sticky **illegal** flag, which the next accepted command clears.
- **When the kernel is done.** A region is done when every LS PE with loads or stores enabled
  has finished them.
- **PEs keep running in DONE.** A region that only loads (for example the upper half of a merged
  kernel) may still have tokens on their way to its neighbour.

### Host registers of a region

| addr | name      | access | content |
|------|-----------|--------|---------|
| 0    | CMD       | W      | command code: 1 CONFIGURE, 2 EXECUTE, 3 HALT, 4 SNAPSHOT, 5 RESET |
| 1    | CFG_ADDR  | RW     | word address of the configuration image |
| 2    | SNAP_ADDR | RW     | word address of the snapshot buffer |
| 3    | KERNEL    | RW     | [15:0] kernel identifier, [16] restore on CONFIGURE |
| 4    | STATUS    | R      | [2:0] state, [3] busy, [4] illegal, [5] available, [11:8] region id, [31:16] kernel id |
| 5    | PROGRESS  | R      | committed store elements |

### Memory images

The controller copies one word at a time with one request outstanding. It uses the same memory
port and tag scheme as the LS PEs.

**Configuration image** (at CFG_ADDR):

```
word 0                     : number T of TCDM words that follow
words 1 .. 240             : 15 PEs x 16 configuration words, PE index = row*5 + col
words 241 .. 240+T         : TCDM image, written to TCDM words 0 .. T-1
```

**Snapshot buffer** (at SNAP_ADDR):

```
words 0 .. 119             : 15 PEs x 8 state words
words 120 .. 120+T-1       : TCDM contents (T from the configuration header)
```

**CONFIGURE** runs in this order:
1. Clear all pipeline state.
2. Load the configuration and the TCDM image.
3. With *restore* set, also write the saved state words back into the PEs and reload the TCDM
   from the snapshot.

That last step is stateful migration. Stateless migration is a plain CONFIGURE on the new
region followed by EXECUTE.

**Costs** measured with a 4–7 cycle memory and 20 % back-pressure:

| operation                              | cycles |
|----------------------------------------|--------|
| configuration (240 words + 6 TCDM words) | 2166 |
| snapshot capture (120 + 6 words)       | 1112 |
| configure with restore                 | 3252 |

### A migration, as the host does it

```
region A: HALT      -> poll STATUS until HALTED and not busy
region A: SNAPSHOT  -> poll until HALTED and not busy     (state now in SNAP_ADDR)
region A: RESET     -> IDLE, available again
region B: CFG_ADDR, SNAP_ADDR, KERNEL[16]=1, CONFIGURE -> poll CONFIGURED
region B: EXECUTE   -> poll DONE
```

## Merging and the shell

**Merge bits.** Between every pair of neighbouring regions, `cgra_fabric` has one merge bit.
- When the bit is set, the border links of the two regions are joined lane by lane. For
  example, PE (2, c) of the upper region meets PE (0, c) of the lower one.
- When the bit is clear, both `valid` and `ready` are held low at that border. A token then
  waits at the border rather than being lost.
- Outer borders are always closed.

**Merged kernels.** A merged kernel is configured and started region by region. Each region
keeps its own controller, so the host issues the commands to every region of the kernel.

**Shell registers.** The shell decodes the host address `h_addr[8:0]`:
- `0x000–0x0FF`: region `h_addr[7:4]`, register `h_addr[3:0]`.
- `0x100` MERGE_H: bit `r*3 + c` joins region (r, c) to (r, c+1).
- `0x101` MERGE_V: bit `r*4 + c` joins region (r, c) to (r+1, c).
- `0x102` INFO: number of region rows and columns.
- `0x103` FREE: one bit per region that is in IDLE.

**Memory tags.** `shell_mem_arbiter` shares the single global-memory port among the 16 regions
round-robin. It writes the region number into tag bits [7:4]. Inside a region, tag bits [3:0]
name the requester: 0 is the controller, and 1/2 and 3/4 are the load/store ports of the two LS
PEs. Every request gets exactly one response with its tag. The memory may respond with any
latency.

`mestra_top` is the shell plus the fabric. Its ports are the host register port and the
global-memory port.

## Files

- **Shared types** (`rtl/`): `mestra_pkg.sv`.
- **Modules** (`rtl/`): `agu.sv`, `fc_pe.sv`, `ls_pe.sv`, `tcdm.sv`, `rr_arbiter.sv`,
  `region_mem_router.sv`, `ffa_rf.sv`, `region_ctrl.sv`, `vcgra_region.sv`, `cgra_fabric.sv`,
  `shell_mem_arbiter.sv`, `shell.sv`, `mestra_top.sv`.
- **Testbenches** (`tb/`): one self-checking testbench per module, named `tb_<module>.sv`.
- **Testbench helpers** (`tb/`):
  - `mem_model.sv`: a behavioural memory with random latency and back-pressure.
  - `tb_kernels_pkg.sv`: builds configuration images for saxpy, relu (split over two regions),
    dot product and a forked scale-and-copy kernel.

Each testbench prints `TB_RESULT checks=N failures=M`. Simulate one with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mestra_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/mestra_pkg.sv tb/tb_kernels_pkg.sv tb/tb_mestra_top.sv
./obj_dir/Vtb_mestra_top
```

### Testbench coverage

- **`tb_vcgra_region`.** Runs an in-place SAXPY on one region. It halts mid-run, snapshots,
  releases the region, restores and resumes; every Y must equal `a*X + Y0`. It then runs an
  accumulated dot product.
- **`tb_cgra_fabric`.** Runs relu over two vertically adjacent regions. It first checks that
  nothing crosses a closed border, then that every result is right once the border is open.
- **`tb_mestra_top`.** Uses the full 4 x 4 x (3 x 5) configuration, with four kernels sharing
  memory at once:
  - saxpy with stateful migration from region 0 to region 9
  - merged relu with stateless migration from regions 1+5 to 2+6
  - dot product with accumulation
  - forked scale-and-copy

  It counts configure, execute, done, halt, snapshot, stateful and stateless migration, illegal
  commands, merge, predication, accumulation, fork and memory contention. It fails if any of
  them never happened. It runs in about 4 minutes, most of it compilation.
- **`tb_workloads`.** Runs loop-nest kernels on one region: gemm with N = 8 and
  matrix-vector (mvt) with N = 16. They use three-level descriptors with zero strides for operand
  reuse and accumulation over N products. Every output is checked.

## Where this design departs from the paper, or goes beyond it

- **The paper names most blocks and describes their function, not their insides.** All of the
  following are this design's own choices:
  - widths, register maps and command encodings
  - the configuration and snapshot layouts
  - the operation list beyond add and multiply
  - the register-file size and the TCDM size (1024 words)
  - the tag scheme and the handshakes
- **The controller's state machine follows the paper's figure.** The figure draws a return from
  HALTED to EXECUTING without naming its command; here it is EXECUTE. RESET from HALTED is an
  addition, needed to free a region whose kernel has moved away. Restore is a flag on CONFIGURE,
  not a separate command.
- **The AXI4 memory port of the LS PE is replaced** by a simple valid/ready request/response port.
  PCIe (the vendor DMA core) and the DDR controller are outside the RTL. The top has plain ports
  where they connect, and the testbenches use a behavioural memory.
- **Scheduling, the migration decision and its progress threshold belong to host software.** The
  hardware offers the mechanisms: HALT, SNAPSHOT, restore, PROGRESS, FREE and the merge bits.
- **Snapshot cost.** The paper puts saving the state registers at about 30 % of the cost of a
  configuration. Here the state part costs about half of a configuration: 120 state words
  against 240 configuration words, and both copied one word at a time. A wider or
  burst-capable copy engine would lower it.
- **Throughput.** An FC PE delivers one token every other cycle because of the registered-ready
  links. Each LS path keeps only one memory request in flight, so with a 4–7 cycle memory a
  streaming kernel is memory-bound. The gemm test needs about 9 cycles per multiply-accumulate
  (512 in 4604 cycles). The paper gives no rate to compare with.
- **Loop bounds and addressing.** Loop bounds are 16 bits per level. Address arithmetic is 32-bit
  in words. The AGU only walks rectangular nests, so a triangular loop (for example the symmetric
  half of a covariance) is computed as the full square.
- **Open points.**
  - PROGRESS counts committed stores, so it stays 0 in a region that only loads.
  - Synthesis timing and area were not evaluated.
