# Processing-in-MRAM on NAND-SPIN arrays: RTL for a CNN-accelerating memory group

## The idea

A NAND-SPIN device puts eight magnetic tunnel junctions (MTJs) on one shared
heavy-metal strip. A spin-orbit-torque (SOT) current through the strip erases
all eight at once to the antiparallel (high-resistance) state, which stores 0.
A spin-transfer-torque (STT) current through one MTJ then programs it to the
parallel state, which stores 1. The write is split in two: erase the device,
then program the rows whose data bit is 1. The erase is cheap and the program
only touches the ones.

The design turns such an array into a CNN accelerator without adding
arithmetic units. The sense amplifier gets one extra input, FU, and its
output becomes `FU AND stored bit`. An 8-bit counter under every column adds
up those one-bit products over several reads. Every primitive below is built
from reads, ANDs, counts, counter shifts and writes:

- bitwise convolution
- multi-operand addition
- multiplication by a scale factor
- comparison (for max-pooling)
- ReLU

All 128 columns of a subarray work in parallel, and all selected subarrays of
a mat work in lockstep.

A small weight buffer next to each subarray drives FU. A one-bit plane of a
kernel is loaded once and reused for the whole input plane. The buffer can
also slide by one column to move the kernel across the input.

## Hierarchy

```
pim_bank           one group: N_MATS mats, global data buffer, command decoder
 ├─ global_data_buffer   16 x 128-bit rows, two ports (data bus / mats)
 └─ pim_mat  x N_MATS
     ├─ mat_controller    expands a mat command into subarray micro-ops
     ├─ local_data_buffer 8 x 128-bit rows, used for cross-writing
     └─ subarray x N_SUBS
         ├─ nand_spin_array   256 rows x 128 columns of MTJs (32 devices per column)
         ├─ spcsa_array       128 sense amplifiers with the FU (AND) input
         ├─ bit_counter       128 x 8-bit counters (bit_counter_unit each)
         └─ weight_buffer     8 x 128-bit buffer rows driving FU
pim_pkg            shared sizes, latencies, enums and command structs
```

The default sizes follow the paper's main configuration:

- each subarray is 256 × 128 bits;
- each mat is 4 × 4 subarrays (`N_SUBS = 16`);
- each group is 4 × 4 mats (`N_MATS = 16`);
- that makes 1 MiB per group, on a 128-bit data bus.

The 64 MB chip evaluated in the paper is 64 such groups behind chip-level I/O
and control. That level is not part of this RTL.

## The subarray and its four signal patterns

A subarray executes one micro-operation at a time (`sub_cmd_t`). Its decoder
drives the array's control lines as follows:

| operation | WE | ER | C | R | FU | REF |
|-----------|----|----|---|---|----|-----|
| erase     | 1  | 1  | 0 | 0 | 0  | 0   |
| program   | 1  | 0  | D | 1 | 0  | 0   |
| read      | 0  | 1  | 0 | 1 | 1  | 1   |
| AND       | 0  | 1  | 0 | 1 | W  | 1   |

Here D is the data row and W is the selected weight-buffer row.

Erase clears all eight rows of one device in every column. Program ORs the
data into one row, because it can only set bits to 1. A read is an AND with
FU held at 1.

The sense amplifier is a behavioural model. It compares the selected path's
resistance against a reference. An open FU switch gives an open path and
reads as 0.

The other micro-operations are:

- counter reset and counter shift (right by one, so the LSB is dropped);
- buffer write, from the data bus, from the SA output or its inverse, or from
  the counter LSBs;
- buffer slide;
- NOP.

Program can take its data from the command or from the counter LSBs. That is
how results are written back in place.

Handshake: `cmd_valid`/`cmd_ready`. `done` pulses once per micro-operation.
The latency from accept to `done` is:

| micro-operation | cycles | paper figure at the assumed 1 GHz clock |
|---|---|---|
| erase | `T_ERASE = 3` | 8 × 0.3 ns |
| program | `T_PROGRAM = 5` | 5 ns |
| read / AND | `T_SENSE = 1` | 0.17 ns, rounded up to one cycle |
| read / AND with counting | `T_SENSE + 1` | |
| everything else | 1 | |

## Data layout

Multi-bit values are stored vertically. Bit *b* of an operand is row
`base + b`, and each column holds one element. A command therefore works on
128 elements at once.

## The computing primitives (`mat_controller`)

A mat command (`mat_cmd_t`) has these fields:

- an opcode;
- a mask of the subarrays it runs in;
- source and destination subarrays (`src`, `dst`) for moves;
- row bases `row_a`, `row_b`, `row_c` and `row_t`;
- operand widths `wa` and `wb`, a count `n` and a slot `s`;
- a buffer row;
- a data row.

The controller turns it into the following sequences.

**CONV: one convolution period.** The counters are reset. Then, for
`r < wa`, the controller ANDs input row `row_a + r` with weight-buffer row
`buf_row + r` and counts. This handles one bit plane of inputs against one
bit plane of the kernel. Each column's counter ends up holding the popcount
of its kernel window. Sliding the buffer between periods moves the window.
The host combines bit planes of different significance with ADD, as the
paper's scheme of processing each significance separately intends.

**MOVE: cross-writing.** Counts are taken from the source subarray's
counters and written as vertical numbers into another subarray. The count
for a window sits in one column of the source. The write lands at the
first column of that window in the destination. The counter LSBs are
captured one bit at a time into the local data buffer. The columns are
remapped: destination window *t* starts where `(j − s) mod K = 0`. The
result is programmed into row `row_c + t·wa + b` of the destination, and the
source counters are shifted. After eight bits the source counters are zero
again.

**ADD: vertical addition of `n` operands.** For each sum bit `b < wb`, the
controller reads bit *b* of every operand and counts it. It then writes the
counter LSB to `row_c + b` and shifts. The carry stays in the upper counter
bits for the next bit position.

**MUL: multiplication by one scale factor held in the buffer.** For product
bit *b*, every pair `i + j = b` ANDs bit *i* of A (from the array) with bit
*j* of the factor (from the buffer) and counts. The controller then writes
the LSB and shifts. Later bit positions take more counting steps, because
they have more pairs. One factor is shared by all columns, since the buffer
is too small to hold a different multiplier per column.

**CMP: compare A with B, MSB first.** Two extra rows are used, both erased
beforehand:

- **Tag** records that a column's order is already decided;
- **Result** records the outcome.

For each bit, from the MSB down, the controller runs 13 micro-operations:

1. Copy Tag and ~Tag into two buffer rows.
2. Count `A_b & ~Tag` and `B_b & ~Tag`. The counter LSB is then "A and B
   differ here for the first time", and that LSB goes into the second
   buffer row.
3. Add Tag to the count and program its LSB into Tag. Because "newly decided"
   and Tag never overlap, this is `Tag |= newly decided`.
4. Reset, count `B_b & newly decided` plus `Result & old Tag`, and program
   the LSB into Result.

At the end, Result is 1 exactly where B had the 1 at the first differing
bit, that is where A < B.

The paper's text and its Fig. 11 disagree on the polarity:

- the text says that a final Result of 1 means "vector A is greater than or equals to vector B";
- the worked example in Fig. 11 marks 1 where A ≤ B.

This design follows the figure, with ties giving 0.

**RELU.** The controller reads the MSB row (the sign bit) and writes its
inverse into the buffer. Then, for each bit, it ANDs the bit with that
buffer row, counts, and writes the LSB into `row_c + b`. Negative values
become zero and positive values are copied.

Single-step commands are ERASE, PROGRAM, READ (returns a row), BUF_LOAD,
SLIDE, BC_RESET and BC_READ (returns the counter LSBs, then shifts).

**Timing.** Each micro-operation costs one issue cycle, its subarray latency
and one `done` cycle. Captures and skipped bit pairs cost one cycle each.
As a result, the time of an ADD grows with operands × sum bits, and the time
of a MUL with the number of (i, j) pairs. The mat testbench checks these
cycle counts exactly.

## The bank

A host writes rows into the global data buffer over the 128-bit data bus.
It then sends `bank_cmd_t` commands. Each command names a mat and optionally
takes its data row from a buffer row (`from_gdb`).

- **Parallel mats.** A command goes to its mat whenever that mat is idle, so
  all mats work in parallel.
- **Stalls.** A command for a busy mat holds the command port
  (`cmd_ready` low).
- **Result write-back.** Result rows from READ and BC_READ are written back
  into the buffer row given with the command.
- **Arbitration.** If several mats have results at once, the lowest-numbered
  mat wins.
- **Bus collisions.** A host write in the same cycle takes priority, and the
  mat waits.

The end-to-end testbench counts stalls, parallel execution, arbitration,
bus collisions and results. It fails if any of these never happened.

## Where this design departs from the paper or fills gaps

- **Chip level not built.** The chip I/O, the chip controller and the 64-group
  array are not built; the top is one group. The device physics is reduced to
  the logic behaviour of erase, program and sense.
- **Buffer depths.** The paper gives no depth for the weight buffer (8 rows),
  the local data buffer (8 rows) or the global data buffer (16 rows). These
  depths are this design's choices.
- **Clock.** A 1 GHz clock is assumed when turning the paper's nanosecond
  latencies into cycles.
- **Slide.** The buffer slide is a one-column shift toward higher columns,
  with 0 shifted in.
- **Write-back.** Write-back uses program operations only, so destination rows
  must be erased first. The erase granularity is the 8-row device.
- **Counter width.** Counters are 8 bits wide, as in the paper's figure. A
  single count must stay below 256.
- **Host-side steps.** Quantization, batch normalisation, pooling window
  selection and the layer schedule are left to the host that sends commands.
  The paper describes them only at the level of data flow.
- **CMP polarity.** As described above, CMP follows Fig. 11 rather than the
  text.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pim_pkg.sv $(ls rtl/*.sv | grep -v pim_pkg) tb/tb_pim_mat.sv --top-module tb_pim_mat
./obj_dir/Vtb_pim_mat
```

Block testbenches:

- `tb_nand_spin_array`
- `tb_spcsa_array`
- `tb_bit_counter`
- `tb_weight_buffer`
- `tb_subarray`
- `tb_local_data_buffer`
- `tb_mat_controller`
- `tb_pim_mat`
- `tb_global_data_buffer`

Bank testbenches:

- `tb_pim_bank_small` runs the bank with 4 mats of 4 subarrays.
- `tb_pim_bank` runs it at full size, with 16 mats of 16 subarrays.

Both bank testbenches share `tb/pim_bank_tb_body.svh`. They run the paper's
worked convolution example (results 5 7 13 7), then MUL, CMP, RELU and
BC_READ across several mats.

The full-size build takes about a quarter of an hour in Verilator. Its
simulation takes seconds.

To change the sizes, override the `pim_bank` parameters (`N_MATS`, `N_SUBS`,
`N_ROWS`, `N_COLS`) or edit the constants in `pim_pkg`.
