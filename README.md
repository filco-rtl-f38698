# FILCO: a run-time composable matrix-multiply accelerator in SystemVerilog

DNN layers of very different shapes, such as attention heads of 64 and MLPs
of 3072, or sequences of 32 or 512 tokens, waste fixed-shape accelerators:
small or odd-shaped matrices get padded to the hardware's tile, and the
padding costs both compute and off-chip traffic. FILCO avoids this by making
three things programmable at run time, per instruction rather than per
bitstream:

* **the compute tile.** Each AI Engine (AIE) kernel multiplies a tile whose
  size is chosen per instruction, in steps of a 2x8x8 atomic operation, up
  to 32x32x32.
* **the memory view.** Each Flexible Memory Unit (FMU) is a flat buffer. An
  instruction says how to read it: as the whole array, or as a
  rows-by-columns window with a given row pitch.
* **the memory function.** The same FMU can hold weights, activations or
  results, and can feed any Compute Unit (CU). Every FMU has a stream to and
  from every CU.

This repository holds synthesizable RTL for the whole data and control plane
of that architecture, plus self-checking testbenches that run it end to end.
The AIE processors themselves are AMD hard IP. Here each one is replaced by
a logic block with the same stream interface that does the same
flexible-bound kernel. Data are 32-bit integers, not FP32.

## Structure

```
              instruction memory (off-chip)
                        |
                 +-------------+   one instruction queue per unit
                 |  instr_gen  |----------------------------------+
                 +-------------+                                  |
                                                                  v
   off-chip    +------------+  loader streams  +-------+   full   +--------------+
   memory <===>| io_manager |----------------->| fmu 0 |<-------->| compute_unit |
    (AXI4)     |  loader    |<-----------------|  ...  |  mesh of | 0 .. N_CU-1  |
               |  storer    |  storer streams  | fmu N |  streams |              |
               +------------+                  +-------+          +--------------+
                                                                   cu_buffer
                                                                   mesh_manager
                                                                   K x aie_kernel
```

| Module | Role |
|---|---|
| `filco_top` | Instantiates and wires everything. Top ports: AXI4 master, instruction-memory read port, start/done. |
| `instr_gen` | Reads packets `{is_last, des_unit, valid_length}` + words and hands each word to its unit. |
| `io_manager` | Loader and Storer engines. Each moves a tile of an M x N row-major matrix between DDR and one FMU. |
| `fmu` | Two 16384-word buffers (ping, pong), each with its own running operation. |
| `compute_unit` | Decoder, `cu_buffer`, `mesh_manager` and K `aie_kernel`s. |
| `cu_buffer` | Two sets of LHS, K RHS banks and K OUT banks, each 1024 words (32x32). |
| `mesh_manager` | Streams operands from `cu_buffer` into the K kernels and results back. |
| `aie_kernel` | Flexible-bound MM kernel of one AIE. |
| `sync_fifo` | Instruction queues. |
| `filco_pkg` | Instruction formats, opcodes, widths. |

Default sizes: 9 FMUs of 2 x 16384 words, 3 CUs of 8 kernels each, and 16-entry
instruction queues. The nine 128x128-element FMUs are the configuration the
architecture is illustrated with. The CU and AIE counts are free choices here:
the architecture leaves them to a design-space exploration.

## How a program runs

Units are **not** synchronised by a central sequencer. Each unit has its own
instruction queue and runs its queue in order. Units meet only through their
data streams, which block:

* a CU load waits until the FMU sends;
* an FMU receive waits until the loader delivers;
* the storer waits until the FMU sends.

The program, written offline by a compiler, therefore fixes both the
dataflow and the schedule. The hardware only makes sure nothing is lost or
overtaken. `done` rises when the instruction generator has dispatched the
packet flagged `is_last` and every unit has executed an instruction flagged
`is_last`.

### Instruction words

Every instruction is one 128-bit word. Each unit's struct sits in the low
bits, most significant field first; unused upper bits are zero.

| Unit (des_unit) | Fields, MSB first (bits) |
|---|---|
| header | is_last(1) des_unit(8) valid_length(16) |
| Loader (0), Storer (1) | is_last(1) ddr_addr(32) fmu(8) M(12) N(12) start_row(12) end_row(12) start_col(12) end_col(12) |
| FMU (2 .. 2+N_FMU-1) | is_last(1) ping_op(3) pong_op(3) src_cu(8) des_cu(8) count(16) start_row end_row start_col end_col ld (12 each) |
| CU (2+N_FMU ..) | is_last(1) ping_op(3) pong_op(3) src_fmu(8) des_fmu(8) count(16) bound_i(5) bound_k(3) bound_j(3) acc(1) |

More on the fields:

* `ddr_addr` is the byte address of element (0,0).
* Tile ranges are half-open: `[start, end)`.
* `ld` is the FMU row pitch. The original field list does not have it.
* `bound_*` are counts of atomic steps: the CU tile is `2bi x 8bk` times
  `8bk x 8bj*K`.

### The two buffers of a unit

Both the FMU and the CU decode one instruction into **two operations**:
`ping_op` on buffer (set) 0 and `pong_op` on buffer (set) 1. The two run
concurrently, and the instruction retires when both are finished. This is how
loading overlaps computing:

* An FMU can receive the next operand from DDR into pong while it streams
  tile views of the current operand out of ping.
* A CU can load the next LHS/RHS into one set while its kernels compute on
  the other.

An instruction carries one `count` and one tile view, so its two operations
must use different ports, and at most one of them may use the view. The RTL
asserts this.

| FMU op | Does |
|---|---|
| `FMU_RECV_IOM` | write `count` words from the loader to addresses 0..count-1 |
| `FMU_SEND_IOM` | read addresses 0..count-1 out to the storer |
| `FMU_SEND_CU` | send the view rows `[sr,er)` x cols `[sc,ec)`, address `row*ld+col`, row-major, to CU `des_cu` |
| `FMU_RECV_CU` | write words from CU `src_cu` into that same kind of view (scatter) |

| CU op | Does |
|---|---|
| `CU_LOAD_LHS` | take `count` words (2bi x 8bk, row-major) from FMU `src_fmu` |
| `CU_LOAD_RHS` | take `count` words (8bk x 8bj*K, row-major) and deal the columns out to the K RHS banks, 8bj columns each |
| `CU_COMPUTE` | run the mesh on this set; with `acc`, add to OUT instead of overwriting |
| `CU_STORE` | send OUT (2bi x 8bj*K, row-major, gathered from the K banks) to FMU `des_fmu`; the length comes from the bounds, so `count` stays free for a load in the other set |

### Mapping C = A x B

This is how the testbenches' program builder maps one multiplication. It is
the intended use of the instruction set:

1. The loader brings A (M x Kd) into FMU `fa` and B (Kd x N) into FMU `fb`.
   Each operand is one tile of a larger DDR matrix. The AXI bursts follow
   the tile rows.
2. For each output tile `(ti, tj)` of size `2bi x 8bj*K`, and each k step of
   `8bk`:
   * `fa` sends the view of A's rows `ti..` and columns `tk..`;
   * `fb` sends the view of B's rows `tk..` and columns `tj..`;
   * the CU loads both and computes, with `acc` set for every k step after
     the first.
3. The CU stores the finished tile into FMU `fc`, which scatters it into its
   view of C.
4. `fc` sends all of C to the storer.

Consecutive output tiles alternate between the CU's two sets. The builder
merges neighbouring operations on different sets into one instruction, for
example "COMPUTE set 0 and LOAD_LHS set 1" or "LOAD_RHS set 0 and STORE
set 1".

## Inside a Compute Unit

The K kernels form a **1 x K row split along the output columns**. All of
them multiply the same LHS. Kernel `a` gets RHS bank `a` (columns
`a*8bj .. a*8bj+8bj-1`) and returns OUT bank `a`. The mesh manager does the
following:

1. It sends a three-word header `bi, bk, bj` and then LHS on every kernel's
   `in0`. This is a broadcast: each word is held until every kernel has taken
   it.
2. At the same time, it sends RHS bank `a` on kernel `a`'s `in1`.
3. It waits until all K `out0` streams are valid, takes one word from each in
   the same cycle, and writes them to the K OUT banks at the same address,
   adding to the stored value when `acc` is set.

The kernel itself (`aie_kernel`) takes the bounds from its stream, stores the
LHS and RHS, and walks `i` (bi), `j` (bj), `k` (bk) steps of one 2x8x8 atomic
operation each. It then streams OUT row-major. The atomic operation runs
at 8 multiply-accumulates per cycle, so a step takes **16 cycles** and a
tile `16*bi*bj*bk` cycles. The smallest tile, 2x8x8, takes 16 cycles. The
largest, 32x32x32, takes 1024 cycles and spans the whole CU buffer. The
testbenches check these cycle counts exactly. They are this design's model of
a kernel: the real AIE runs its own clock and VLIW schedule, and its cycle
counts are not given.

Kernels only accept a new tile after their previous OUT has left. Inside one
CU, the overlap therefore comes from the CU buffer sets, not from the
kernels.

## The IO Manager

The IO Manager has two independent engines, the Loader and the Storer, each
with its own instruction queue. An engine walks its tile row by row. It cuts
each row into AXI4 INCR bursts of one 32-bit element per beat. A burst is at
most 256 beats and never crosses a 4 KiB boundary. Each direction keeps one
burst in flight. Elements go to or come from the FMU in row-major tile order.
An instruction with an empty tile moves nothing, which is how a unit that has
no real work receives its `is_last`.

## Where this departs from the original architecture

* **Arithmetic.** The original computes in FP32. Here data are 32-bit two's
  complement integers with wrap-around, so results can be checked exactly.
  Changing `data_t` and the multiply-add in `aie_kernel` and `cu_buffer`
  would give floating point.
* **Port width.** The original widens off-chip and FMU ports with cyclic
  partitioning (several elements per beat). Every stream and AXI beat here
  carries one element, and buffers are single arrays with asynchronous read
  and synchronous write. Throughput figures of the original therefore do not
  carry over.
* **The AIE.** The kernel's function is implemented in logic with its own
  cycle model. PLIO links, AIE clock domains and the AIE array's routing are
  not modelled.
* **Instruction details are this design's own.** The original gives only
  field names, so the following were chosen here:
  * all field widths and opcode values;
  * the FMU row pitch `ld`;
  * the CU's `bound_*` and `acc` fields, because the original sets the kernel
    bounds at run time but lists no field for them;
  * STORE taking its length from the bounds.
* **Mesh shape.** Only the Mesh Manager's role is given in the original. The
  1 x K column split and the broadcast-with-taken-mask are choices made here.
* **One IO Manager.** The text speaks of "IO Managers" in one place, but the
  architecture drawing has one. This design has one.
* **Scheduling is offline software.** The mapping/scheduling optimiser (MILP
  and genetic search) is not hardware. Programs in the testbenches come from
  a simple builder in `tb/filco_tb_pkg.sv`.
* **No host interface.** Start, base address and done are plain ports.
  There is no register file.

## Sizes and limits at the defaults

* FMU buffer: 16384 words (128 x 128) per ping or pong buffer, 9 FMUs.
* CU tile: up to 32 x 32 LHS, 32 x 32 per AIE RHS and OUT, so 32 x 32 x 256
  per CU with 8 kernels.
* Counts are 16 bits. Matrix dimensions and tile corners are 12 bits, so at
  most 4095. DDR addresses are 32-bit.
* Any M x K x N multiplication with dimensions up to 4095 can be run by
  tiling. M must be a multiple of 2, K a multiple of 8, and N a multiple of
  8 x K_AIE (64 at the defaults), because every kernel of a CU takes its own
  block of at least 8 output columns; otherwise pad. For example, the
  32 x 32 attention scores of BERT-32 are computed 64 columns wide. For example:
  * BERT-base layers for sequence lengths 32 to 512 (hidden size 768,
    MLP 3072, 12 heads of 64) need only tiles of this size;
  * the single-kernel sizes 8x24x16 to 32x32x32 all map to one kernel call
    each.

## Simulating

Everything runs with plain Verilator 5 (`--binary --timing`). A testbench is
built from its own file, with the packages named first, and
`-y` lets Verilator find the rest:

```
verilator --binary --timing --assert -y rtl -y tb --top-module tb_filco_top \
    rtl/filco_pkg.sv tb/filco_tb_pkg.sv tb/tb_filco_top.sv
./obj_dir/Vtb_filco_top
```

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_instr_gen` | 40 random packets with a random memory latency and back-pressure. Checks every word reaches its unit in order, nothing is sent after the last packet, and `done` rises. |
| `tb_io_manager` | A 3 x 600 tile (bursts split at 256 beats and at 4 KiB), a small tile, an empty tile and a store into the middle of a matrix. Checks every element, the untouched neighbours, `wlast`, and the exact burst count. |
| `tb_fmu` | All four FMU ops, with ping receiving while pong sends. Checks against a copy of both buffers. |
| `tb_aie_kernel` | Bounds from 2x8x8 to 32x32x32 plus random ones. Checks OUT against a reference product and compute cycles = 16 x steps. |
| `tb_cu_buffer` | All four ports, both sets, accumulate mode. |
| `tb_mesh_manager` | Two kernels with a modelled buffer: overwrite, accumulate, set isolation, largest tile. |
| `tb_compute_unit` | An 8-instruction ping/pong program. Checks A1·B1 and A0·B0 + A2·B2 and that AIE compute cycles are exact. |
| `tb_filco_top` | Reduced size (6 FMUs, 2 CUs of 2 kernels). Runs three jobs through the whole chip and counts each mechanism: CU and FMU ping/pong overlap, accumulation, three tile shapes, split bursts, memory stalls, stream back-pressure, multi-word packets. About 9.5k cycles. |
| `tb_filco_bert_head` | Default parameters. The three matrix products of one BERT-32 attention head run at once, one per CU: Q·Kᵀ (padded to 64 columns), P·V, and a 64x64 slice of the output projection out of a 768x768 weight matrix. About 35k cycles. |
| `tb_filco_full` | Default parameters. Three concurrent jobs, one per CU, including a 32x32x256 tile on 8 kernels. About 52k cycles, seconds of simulation. |

Off-chip memory and instruction memory are behavioural models in `tb/`
(`axi_mem_model`, `instr_mem_model`). Both insert random wait states.

## Changing it

* Sizes: `N_FMU`, `N_CU`, `K_AIE`, `FMU_DEPTH` and `IQ_DEPTH` on
  `filco_top`.
* The CU buffer depth follows the 32x32x32 kernel limit. It is set by
  `CU_TILE` and the `BI/BK/BJ_MAX` constants in `filco_pkg`.
* Unit numbering is fixed by the top. To add a unit type, extend the
  numbering in `filco_pkg` and the dispatch in `filco_top`.
* The program builder in `tb/filco_tb_pkg.sv` is the quickest way to
  generate valid programs for new shapes.
