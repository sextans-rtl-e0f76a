# Sextans in SystemVerilog: a streaming SpMM accelerator

This is register-transfer-level SystemVerilog for the Sextans accelerator
(Song et al., FPGA 2022). Sextans computes general sparse-times-dense matrix
products:

    C_out = alpha * A * B + beta * C_in

Here A is an M x K sparse matrix, and B (K x N), C_in and C_out (M x N) are dense.
All values are FP32.

The design rests on one idea. Nothing whose size grows with the problem is
held on chip except one slice of C. Everything else streams from off-chip
memory:
- A streams as a pre-scheduled list of non-zeros.
- B streams in windows of K0 rows.
- C_in and C_out stream through.

So one fixed piece of hardware runs any matrix shape. It needs no
re-synthesis, and its only limit is that ceil(M/64) rows of each C column
block must fit in the scratchpads.

What makes the stream fast is an offline step. Software reorders the
non-zeros of A so that each processing element (PE) receives one useful
element per cycle. The reordering also guarantees that two updates to the
same row of C are at least D cycles apart, which hides the latency of the
floating-point adder without any hazard logic.

## 1. Partitioning the problem

There are P = 64 PEs, organised as 8 processing-engine groups (PEGs) of 8 PEs.
Each PE drives N0 = 8 processing units (PUs), one PU per column of the current
column block.

- **Rows of A and C are binned by PE.** Row r belongs to PE r mod 64 and is
  stored at local ("compressed") row r / 64. Each PU owns one column of one
  PE's C rows, held in a scratchpad of C_DEPTH = 12,288 words. So the whole
  machine holds 12,288 x 64 = 786,432 rows of an 8-column slice of C.
- **Columns of A are cut into windows** of K0 = 4,096. While window j is
  processed, the matching 4,096 x 8 slice of B sits in every PE's B memory.
  The column index stored with a non-zero is the offset inside its window.
- **Columns of B and C are cut into blocks** of N0 = 8. The whole A stream is
  replayed once per block, so N = 512 takes 64 passes.

One pass over a column block goes:
1. Clear the scratchpads.
2. For each window, load B and stream the window's non-zeros.
3. Drain the scratchpads, multiplied by alpha.
4. Merge the drained values with beta * C_in and write C_out.

## 2. Dataflow and blocks

```
 Q channel --> Read_Ptr --FIFO--> PEG0 --FIFO--> PEG1 --> ... --> PEG7   (pointer chain)
 B x4 ch   --> Read_B   --FIFO--> PEG0 --FIFO--> PEG1 --> ... --> PEG7   (B chain)
 A ch g    --> Read_A g ---------> PEG g            (one A channel per PEG)
 PEG0..7   --> Collect_C --\
 C_in x8   --> Read_C --FIFO--> Comp_C --FIFO--> Write_C --> C_out x8
```

| Module | Role |
|---|---|
| `sextans_pkg` | Shared widths, the `a64_t` non-zero record, the `cfg_t` run descriptor |
| `sextans_fp32_mul`, `sextans_fp32_add` | Combinational IEEE-754 single-precision units |
| `sextans_fifo` | Valid/ready FIFO, depth 8, used on every chain link |
| `sextans_pu` | Multiply, read-modify-write of one scratchpad column, clear, alpha drain |
| `sextans_bmem` | Window of B (K0 x N0), 8 banks, written 8 rows per cycle |
| `sextans_pe` | Decodes one non-zero, reads B memory, feeds its 8 PUs |
| `sextans_peg` | 8 PEs in lock step, the loop controller, relay of both chains |
| `sextans_rd_port` | Read-request engine with credit-based flow control (helper) |
| `sextans_read_a` / `_b` / `_c` / `_ptr` | Address generators for each matrix |
| `sextans_collect_c` | Reorders the PEG outputs into row order, 16 rows per beat |
| `sextans_comp_c` | 128 lanes of `ab + beta * c_in` |
| `sextans_write_c` | Spreads C_out over 8 write channels and raises `done` |
| `sextans_top` | Wires it all and exposes 29 memory channels as plain ports |

B and the pointer list are **broadcast along a chain**: PEG g forwards every
word to PEG g+1 through a FIFO. This keeps fan-out local. A slow PEG
back-pressures the chain, and FIFO slack absorbs short differences in PEG
progress. No global barrier exists. Each module runs its own copy of the loop
nest from the same run descriptor, and the FIFOs keep them in step.

## 3. The scheduled non-zero stream (the hard part)

Everything depends on the format the host prepares. The hardware trusts it
completely.

### 3.1 Record format

Each non-zero is one 64-bit record `a64_t`:

| Bits | Field | Meaning |
|---|---|---|
| 63:50 | `col` | Column offset inside the window (0..4095) |
| 49:32 | `row` | Compressed row, r / 64 |
| 31:0 | `val` | FP32 value |

A record whose `col` is all ones (14'h3FFF) is a **bubble**: the PE does
nothing that cycle. One 512-bit A word holds 8 records, one per PE of the PEG,
for the same cycle. Lane e sits in bits 64e+63..64e.

### 3.2 Scheduling rule

For each window and each PE, the host walks that PE's non-zeros in
column-major order. It places each one in the earliest free cycle slot that
is at least D slots after the previous element of the same row. Empty slots
become bubbles. This is greedy out-of-order list scheduling. The 8 PEs of a
PEG then share one A word per cycle, so all lists in a window are padded with
bubbles to the longest list among the 64 PEs.

### 3.3 Pointer list Q

Q holds K/K0 + 1 word offsets:
- Q[0] = 0.
- Window j occupies A words Q[j] .. Q[j+1]-1.
- Q is identical for every PEG.
- It is stored 16 pointers per 512-bit word.

The run descriptor's `a_len` equals Q[K/K0], the length of each PEG's list.

### 3.4 Hazard distance D

An element that enters a PU at cycle t has its product registered and C[row]
read at t+1. The sum passes ADD_LAT adder registers and is written back at
t+2+ADD_LAT. The new value is visible to reads one cycle after that. Two
updates of the same row must therefore issue at least

    D = ADD_LAT + 2

cycles apart. The default ADD_LAT = 2 gives D = 4, the distance used in the
original paper's worked example. The PU checks the rule with an assertion
(`a_no_raw`); the hardware does not forward.

Scheduling is per window, so the last element of window j and the first of
window j+1 may share a row. The PEG therefore holds the first A word of a
window until D cycles after the last issue. This is the **window guard**.

The testbenches contain a SystemVerilog version of this scheduler. It is the
reference for the format: it reproduces the 4-PE example of the paper exactly
(`tb_sextans_pe`).

## 4. Inside a PE

A non-zero goes through the PE as follows:
1. **t**: the record arrives. If it is not a bubble, its `col` addresses B
   memory.
2. **t+1**: the 8 values b_0..b_7 of row `col` come out, one to each PU. The
   PUs share `row` and `val`.
3. **In each PU:**
   - the first stage registers `val * b_q` and reads `C[row]`;
   - ADD_LAT stages add;
   - the sum is written back.

Other operations:
- **Clear:** writes zero to one row per cycle.
- **Drain:** reads a row and multiplies it by alpha. Its result is valid two
  cycles later.

B memory has 8 banks, selected by row mod 8. The chain can therefore deliver
a window at 8 rows per cycle, and B memory accepts it at that rate.

## 5. The PEG controller

`sextans_peg` is a small FSM: IDLE, CLEAR, PTR0, PTR, LOADB, COMP, FLUSH,
DRAIN.

For each column block it does the following:
1. Clear ceil(M/64) rows.
2. Take Q[0].
3. For every window:
   - take Q[j+1];
   - load ceil(K_j/8) B words;
   - issue Q[j+1]-Q[j] A words.
4. Wait until the PE pipelines are empty.
5. Drain.

The drain goes through a local FIFO, and the controller counts values in
flight against that FIFO's free space. So Collect C can stall a PEG without
losing data.

## 6. Memory layouts and channel protocol

Every channel carries 512-bit words at word addresses. The base addresses in
`cfg_t` are word addresses on each matrix's own channels. All matrices are
column-major over column blocks of 8.

- **B**, block i, rows 8g .. 8g+7:
  - channel c (0..3) holds rows 8g+2c and 8g+2c+1, each 8 x FP32;
  - the word address is `b_base + i*ceil(K/8) + g`.
- **C_in and C_out**:
  - rows are padded to Mp = ceil(M/64)*64;
  - for block i, rows 16g .. 16g+15, channel c (0..7) holds rows 16g+2c and
    16g+2c+1;
  - the word address is `base + i*(Mp/16) + g`.
- **A**: PEG g reads its own list at `a_base + w` on its own channel, with
  w = 0 .. a_len-1, once per column block.
- **Q**: 16 pointers per word from `ptr_base`, re-read for every column
  block.

**Read channels:**
- The requester drives `req_valid`, `req_addr` and waits for `req_ready`.
- Responses return in order on `resp_valid`/`resp_data`, with any latency and
  no back-pressure.
- Each reader counts outstanding requests against its FIFO's free space, so
  a response always has room.

**Write channels:** the requester drives `wr_valid`, `wr_addr`, `wr_data` and
waits for `wr_ready`. Each of the 8 channels accepts on its own.

## 7. Using the top

`sextans_top` takes a `cfg_t`:
- `m`, `k`, `n`;
- `alpha`, `beta`;
- `a_len`;
- `ptr_base`, `a_base`, `b_base`, `c_in_base`, `c_out_base`.

Load the matrices into memory as laid out in section 6. Drive the descriptor
and pulse `start` for one cycle. `done` pulses when the last C_out word has
been accepted, and `busy` is high in between. Reset (`rst_n`) is active low
and asynchronous. It clears control state only; scratchpads and B memory
start undefined and are cleared by the algorithm.

Defaults are the full configuration: 8 PEGs x 8 PEs x 8 PUs, K0 = 4096,
C_DEPTH = 12288, 4 B channels, 8 C_in and 8 C_out channels. The parameters
PEGS, K0 and C_DEPTH may be reduced for fast simulation. P is always
8 x PEGS, and the host must bin rows by that P.

## 8. Simulating

Each testbench is self-checking. It prints `TB_RESULT checks=N failures=M`
and stops. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/sextans_pkg.sv tb/sextans_tb_pkg.sv tb/tb_sextans_top.sv \
    --top-module tb_sextans_top -o sim
./obj_dir/sim
```

Replace the testbench name for any block (`tb_sextans_pu`, `tb_sextans_peg`,
...). The other files are found via `-I`.

| Testbench | What it checks |
|---|---|
| `tb_sextans_fp32_*` | 20,000 random operands each, against a double-precision reference rounded to nearest even |
| `tb_sextans_pe` | The paper's 4-PE worked example, then a random window |
| `tb_sextans_peg` | One PEG against a software model of its scratchpads |
| `tb_sextans_top` | The whole design at reduced size (2 PEGs, K0 = 64) on a random problem |
| `tb_sextans_top_full` | The default-size top (no parameter overrides): M = 300, K = 4104 (two windows), N = 16, about 4,000 non-zeros. Building takes about 3 minutes, running a few seconds |

`tb_sextans_top` uses random latencies and stalls on all 29 memory channels.
It checks:
- every C_out element;
- that the cycle count stays within twice the analytic cycle model of the
  paper's performance section;
- that each of these actually occurred: a bubble, the window guard, chain
  back-pressure, read stalls, write stalls, a partial last window, more than
  one column block, and more than one window.

`tb/sextans_hbm_channel.sv` is a behavioural memory channel with configurable
latency and stall rate. It is used only by testbenches.

## 9. Numerics

The FP32 units round to nearest even. Subnormal inputs and results are
flushed to zero, and any NaN becomes 0x7FC00000. Infinities propagate.
Summation order follows the schedule, so results can differ in the last bits
from a sequential CPU loop. The testbenches replay the exact order.

## 10. Departures from the original design

- **Adder latency.** The paper's adder latency is 7–10 cycles on its FPGA. Here
  the adders are combinational with ADD_LAT register stages after them, and
  D = 4. Raising ADD_LAT raises D, which must then be used by the scheduler.
- **B memory per PE.** Each PE has its own B memory. The FPGA build shares one
  block between two PEs.
- **Scratchpad width.** Each PU has its own 32-bit scratchpad array. The FPGA
  build packs two PUs' values in one 64-bit URAM word.
- **Clear length.** The paper's cost model charges K/P cycles to clear C.
  This design clears ceil(M/64) rows, which is what the scratchpad holds.
- **Chosen details.** The bit layout of a64, the bubble code, the
  window-guard rule, the memory layouts, the channel protocols and the
  `a_len` scalar are not given by the paper. They are this design's choices.
- **Scheduler.** The non-zero scheduler is host software and is not part of
  the RTL.
- **Physical and runtime parts.** The HBM stack, its controller and the
  OpenCL runtime are outside the design.

## 11. How far it can be trusted

Each module has a block testbench, and each testbench has been shown to fail
on a deliberately broken copy of its module. The end-to-end runs at reduced
and at full size match a bit-exact reference on every output element.

Not verified:
- problems at the scale of the paper's benchmarks (hundreds of thousands of
  rows);
- timing closure and resource use on a real device;
- behaviour under a memory system that reorders responses, which the channel
  protocol does not allow.
