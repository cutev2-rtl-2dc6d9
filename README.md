# CUTEv2-style matrix unit in SystemVerilog

A CPU can get matrix throughput without changing its pipeline. The matrix unit
here sits beside the core as a coprocessor. The core describes a whole matrix
multiplication, D = A·Bᵀ + bias, by writing a few registers. It starts the job
with one command and goes on with other work. Later it asks, with a second
command, whether the job has finished. Everything between those two commands
happens inside the unit:

- walking the tiles of the output;
- fetching A, B and bias from memory;
- running a pipelined mixed-precision dot-product array;
- writing C back, transposed if asked.

So one RoCC-style command port and one memory port are the whole coupling. Any
core that can send a custom command can use it.

The RTL is parameterised by the sizes that set the unit's cost and speed:

| parameter | meaning | default |
|---|---|---|
| `MPE`, `NPE` | PE array rows and columns | 4, 4 |
| `KPE_BITS` | reduction width of one PE per cycle | 512 bits |
| `MSCP`, `NSCP` | output tile held in the scratchpad (rows × columns) | 64 × 64 |
| `KSCP_BYTES` | depth of one K step held in the scratchpad | 64 bytes |

At 2 GHz the defaults give 4×4 PEs × 64 INT8 MACs × 2 = 4.1 TOPS. Change the
sizes and throughput and bandwidth needs scale with them. The tile sizes have to
be chosen so that memory keeps up with compute:

    compute time per K step = MSCP·NSCP·KSCP / (MPE·NPE·KPE)          cycles
    memory time per K step  = (MSCP + NSCP)·KSCP / bytes-per-cycle

Larger tiles reuse each fetched byte more often.

## Files

| file | block |
|---|---|
| `rtl/cute_pkg.sv` | shared types: task registers, micro-instructions, data types |
| `rtl/cute_cmd_if.sv` | command decoder, interface registers, task queue, status |
| `rtl/cute_task_ctrl.sv` | tiling and scheduling: issues loader and compute micro-instructions |
| `rtl/cute_load_reqgen.sv` | request generator: row addresses for loads, store read-out and writes |
| `rtl/cute_data_reorder.sv` | routes each returned beat to its scratchpad row, masks padding |
| `rtl/cute_mem_loader.sv` | request generator + data reorder |
| `rtl/cute_spad_ab.sv` | two-bank operand scratchpad (used for A and for B) |
| `rtl/cute_spad_c.sv` | 32-bit accumulator tile buffer |
| `rtl/cute_data_ctrl_ab.sv` | streams A or B blocks from the scratchpad to the array |
| `rtl/cute_data_ctrl_c.sv` | reads, routes and writes back accumulator blocks; RAW stall |
| `rtl/cute_pe.sv` | one six-stage mixed-precision dot-product PE |
| `rtl/cute_pe_array.sv` | MPE × NPE PEs with row/column operand broadcast |
| `rtl/cute_top.sv` | the whole unit |
| `tb/tb_*.sv` | self-checking testbenches, one per block, plus full-size end-to-end |

## Programming model

Each command carries `funct`, `rs1` and `rs2`. The codes are this design's own:

| funct | name | effect |
|---|---|---|
| 0 | SIZE | M = rs1[31:0], N = rs1[63:32], K = rs2[31:0] |
| 1 | A | A base = rs1, A row stride = rs2 (bytes) |
| 2 | B | B base, stride |
| 3 | BIAS | bias base, stride |
| 4 | C | C base, stride |
| 5 | MODE | data type = rs1[2:0], bias type = rs1[5:4], transpose = rs1[8] |
| 6 | ISSUE | copy the registers into the task queue (asyncMatMul) |
| 7 | CHECK | respond once the oldest unchecked task has completed (checkMatmul) |
| 8 | STATUS | respond at once with {unchecked, outstanding, completed} counts |

- **Data types.** 0 INT8, 1 FP8 (E4M3), 2 FP16, 3 BF16, 4 TF32. TF32 is
  stored as a 32-bit word whose low 13 bits are ignored.
- **Bias types.** 0 zero, 1 row-repeat (one bias row of N words, used for
  every output row), 2 full (an M×N matrix).
- **Bias and C elements** are 32 bits: int32 for INT8 inputs, fp32 for all
  other types.
- **Layout.** A is M×K, row-major. B is N×K, row-major: each output column's
  operands are contiguous, so the result is A·Bᵀ. With `transpose` set, C is
  written as N×M.
- **Alignment.** Every base and stride must be a multiple of 64 bytes, because
  one memory beat is one 64-byte scratchpad row.

ISSUE is accepted while the 4-entry queue has room. Otherwise `cmd_ready` stays
low and the core stalls on the command. A CHECK holds its response until a task
completes that no earlier CHECK has claimed. Software can therefore issue tile
i+1 and then check tile i, which keeps the unit busy while the core works on the
previous result. A CHECK with nothing outstanding answers at once with bit 63
set.

## Tiling and scheduling (task controller)

The controller walks the output in MSCP×NSCP tiles, row-major. It walks each
tile's K dimension in steps of KSCP_BYTES bytes, which is 64 INT8, 32 FP16 or 16
TF32 elements per step. This is output-stationary: a tile's partial sums stay
in the C scratchpad until its last K step, and only then are they written out.

The controller runs two independent cursors:

- **Loader cursor.** For each tile it issues, in order:
  1. a bias load into the C buffer (skipped for zero bias);
  2. one A load and one B load per K step;
  3. one store of the finished tile.

  The operands for a K step go into bank `step mod 2` of each operand
  scratchpad.
- **Compute cursor.** Issues one compute micro-instruction per K step to the
  data controllers.

Handshake flags keep the two cursors consistent:

- An A/B load into a bank waits until compute has released that bank. This is
  double buffering: the next step loads while the current one computes.
- A compute step waits until both of its operands have arrived.
- A tile's first compute step waits for its bias. It also waits until the store
  of the previous tile has finished reading the C buffer. With zero bias there
  is no bias load: the data controller feeds zeros in place of the old C.
- A store waits until the tile's last result has been written.

The task's done signal is raised after the last store has been written to
memory. Edge tiles and edge K steps are handled by row counts, byte counts and
masking, so M, N and K need not be multiples of anything. One task runs at a
time. The next queued task starts after the previous one has finished.

## Memory loader

The loader takes one micro-instruction at a time: load A, load B, load bias, or
store C.

- **Loads.** The request generator sends one aligned 64-byte read per row
  (`base + r·stride`). For each read it pushes a descriptor into a 32-entry FIFO
  (mode, bank, row, last). Reads are held back when the FIFO is full. The data
  reorder block pops one descriptor per returned beat and writes the beat to
  that row. It zeroes the bytes of an A/B row past the step's valid K bytes, and
  the words of a bias row past the tile's valid columns. Padding therefore adds
  exact zeros to every dot product. The memory must return reads in the order
  they were requested.
- **Stores.** The request generator reads the C buffer 16 words at a time, by
  row or, for a transposed store, by column. It parks those words in a 2-entry
  buffer and issues full-line writes with a byte strobe covering the valid
  words. It reports `st_read_done` once the C buffer has been read out, which
  frees the buffer for the next tile. It reports `st_done` once every write has
  been accepted.

## Scratchpads

- **A and B.** Each has two banks of MSCP (or NSCP) rows × 64 bytes. Each bank
  is split into PE_DIM sub-banks by row index mod PE_DIM. One cycle can then
  read the PE_DIM rows of an array block while the loader writes the other bank.
  Reads are registered.
- **C.** A single MSCP×NSCP tile of 32-bit words, with three ports:
  - the compute side reads and writes one MPE×NPE block per cycle;
  - the loader writes one row segment of bias;
  - the store reads 16 words of a row or a column.

  An assertion checks that the compute and loader writes never coincide. The
  scheduling above guarantees this.

## Data controllers and the accumulator hazard

One compute micro-instruction covers a K step: ⌈rows/MPE⌉ × ⌈cols/NPE⌉ blocks
in 64 bytes of K. When KPE_BITS is below 512 bits, that is KSUB = 512/KPE_BITS
reduction slices.

- **Loop order.** The A and B controllers walk the same loop in lockstep: slice
  `ks` (outermost), then block row `m`, then block column `n`. In each cycle the
  A controller sends MPE rows of A, which are broadcast along the array's rows.
  The B controller sends NPE rows of B, which are broadcast down the columns.
- **C controller.** Issues, in the same cycle, the read of C block (m, n). For
  the first slice of a zero-bias tile it feeds zeros instead. It delays the
  block address by the PE latency and writes the array's result back to the same
  block.
- **Hazard.** A block can be read again before its previous result has come back
  when there are few blocks (a small edge tile) and several slices per step. The
  C controller keeps the block addresses in flight in a PE_LAT+1 deep delay line.
  If the block about to be read is still in it, the controller stalls all three
  controllers. At the default sizes a K step is a single slice and the stall
  cannot happen. With KPE_BITS=256 it does, and the end-to-end testbench counts
  it.
- **Tile done.** Raised when the last write-back of the tile's last step has
  been made.

## The PE: six stages of mixed precision

Each PE computes one dot product of KPE_BITS of A with KPE_BITS of B, and adds
it to a 32-bit accumulator. The inputs are 64 INT8/FP8, 32 FP16/BF16 or 16 TF32
elements. The floating-point path does not add one product at a time. It adds
all products and the accumulator together as fixed-point numbers aligned to the
largest exponent. That sum is then normalised once.

| stage | work |
|---|---|
| 1 DECODE | split each element by data type into sign, exponent (with hidden bit, subnormals handled) and mantissa; decode the fp32 or int32 accumulator |
| 2 MUL | multiply mantissas, add exponents, compute product signs |
| 3 EMAX | find the largest exponent among the products and the accumulator; compute each term's right shift |
| 4 ALIGN | shift every term to that exponent, keeping 24 guard bits below the fp32 LSB, truncating what falls off; apply signs |
| 5 ADD | sum all terms in a wide two's-complement adder tree |
| 6 NORM | find the leading one, normalise to fp32 with round toward zero, flush subnormal results to zero, saturate overflow to infinity |

- **INT8** skips the exponent logic. The exact int32 dot product is added to
  the int32 accumulator, wrapping on overflow.
- **Latency** is 6 cycles, with one new input per cycle.
- **Numerics.** The result can differ from a sequential fp32 sum. Truncating
  below the largest exponent drops the tails of small products. Rounding toward
  zero then drops the tail of the sum. The PE testbench models exactly this
  rule, independently of the RTL. NaN and infinity inputs are not treated
  specially.

## Top level

`cute_top` wires together:

- the command interface;
- the controller;
- the loader;
- the scratchpads A, B and C;
- the three data controllers;
- the PE array.

Its ports:

- `cmd_*` / `resp_*`: a RoCC-like command and response pair;
- `mem_rreq_*` / `mem_rresp_*`: a read port, one 64-byte line per request,
  in-order responses;
- `mem_wreq_*`: a write port with a 64-bit byte strobe;
- `busy`.

The CPU, vector unit, caches and interconnect are outside this design. The
memory port is where a cache or bus adapter would attach.

## Where this departs from the original design description

- **Command encoding.** The command codes, status format, queue depth and
  bus width are this design's choices.
- **Number formats.** These are also this design's choices:
  - FP8 is E4M3 only;
  - rounding is toward zero;
  - subnormal results are flushed;
  - NaN and infinity get no special handling.
- **Task controller.** The original block diagram shows loader and data
  controller micro-instructions arriving from the core side. It does not show a
  block that generates them. Here a dedicated task controller inside the unit
  does the tiling. Its order and its hand-over rules are this design's own.
- **PE pipeline grouping.** The original pipeline diagram draws the exponent
  maximum as two boxes and the adder as two boxes, across six stages. Here the
  exponent search is one stage and the adder tree is one stage. The stage count
  and latency of six are kept.
- **One task at a time.** Tasks are not overlapped with each other. Only loads
  and compute within a task overlap.
- **Single C buffer.** The store of one tile must read the C buffer out before
  the next tile's first step. At the default sizes that costs at least 256
  cycles per tile: 4096 words, read 16 per cycle.
- **In-order memory.** The loader needs in-order read responses and
  64-byte-aligned bases and strides. It has no misaligned or element-granular
  access.
- **No convolution.** There is no convolution addressing mode. Convolutions must
  be lowered to GEMM by software.
- **CSR integration.** The CSR-based integration used for one of the host cores
  is not provided. Only the RoCC-style port exists.

## Verification

Every block has a self-checking testbench that prints
`TB_RESULT checks=<n> failures=<n>`:

- `tb_cute_pe` compares against a bit-exact model of the alignment and
  truncation rule for every data type, and checks the 6-cycle latency.
- `tb_cute_pe_array` checks the broadcast pattern.
- `tb_cute_spad` checks banks, blocks, row and column store reads.
- `tb_cute_data_ctrl` checks loop order, zero-C, the hazard stall and
  tile_done.
- `tb_cute_mem_loader` checks addresses, masking, transposed stores and strobes,
  against a random-latency memory.
- `tb_cute_task_ctrl` compares every micro-instruction with an independently
  generated schedule, and checks the hand-over rules.
- `tb_cute_cmd_if` checks queueing, blocking CHECK and status.
- `tb_cute_top` runs seven GEMMs end to end through the command port:
  - all data types and bias types;
  - transpose;
  - edge tiles;
  - back-to-back issue with blocking check.

  It runs with KPE_BITS=256 so that the hazard stall happens, and compares every
  word of C and of the memory around it with a reference GEMM.
- `tb_cute_top_full` runs the same test with every parameter at its default. In
  simulation the default unit kept its PE array busy about 70% of the cycles on
  the first task.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_cute_top \
        -y rtl -y tb +libext+.sv -Irtl rtl/cute_pkg.sv tb/tb_cute_top.sv
    ./obj_dir/Vtb_cute_top
