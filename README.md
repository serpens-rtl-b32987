# Serpens: an HBM-streaming SpMV accelerator in SystemVerilog

Sparse matrix-vector multiplication, `y = alpha * A * x + beta * y`, is
bound by memory traffic. It reuses almost nothing, and a naive
implementation makes random accesses to both `x` and `y`. Serpens turns
all off-chip traffic into sequential streams. It gives the sparse matrix
most of the HBM channels of the FPGA, and it moves both kinds of random
access (reading `x[col]` and accumulating into `y[row]`) into on-chip
memories:

* `x` is cut into segments of `W = 8192` columns. Each segment is loaded
  into on-chip BRAM copies before the non-zeros of those columns stream
  past it.
* `A*x` is accumulated in on-chip URAM for the whole run (output
  stationary). Only at the end is it combined with the old `y` and written
  out, once.
* Every processing engine (PE) is tied to one HBM channel ("memory
  centric"), so no PE reaches across channels.
* Two FP32 partial sums of consecutive rows share one 72-bit URAM word
  ("index coalescing"). This doubles the number of rows the chip can hold.
* There is no hazard logic in the accumulation loop. The host reorders the
  non-zeros so that no two updates of the same URAM word are closer than
  the accumulation latency.

This repository is a register-transfer implementation of that
architecture, in its main 16-channel configuration (Serpens-A16). All
blocks are parameterised. The same RTL builds the 24-channel variant by
setting `HA = 24`.

## Channels and blocks

```
 HBM CH0 --> RdX --> [group 0] --> [group 1] --> ... --> [group 15]     x chain (one register per group)
 HBM CH1 --> RdA0 --> group 0  (PE0..7)      \
 HBM CH2 --> RdA1 --> group 1  (PE8..15)      }-- Arbiter0 (PE0..15)   \
   ...                                                ...               }--> CompY --> WrY --> HBM CH18
 HBM CH16 -> RdA15 -> group 15 (PE120..127) ---- Arbiter7 (PE112..127) /      ^
 HBM CH17 -> RdY ------------------------------------------------------------/
```

Nineteen channels are used: one for `x`, sixteen for `A`, one for the
input `y` and one for the output `y`. Every port is 512 bits wide. A
dense beat carries 16 FP32 values. A sparse beat carries 8 non-zeros of 64
bits each: a 32-bit value and a 32-bit packed row/column index. The 8 lanes
of a beat go to the 8 PEs of the group, so each group consumes one beat
per cycle and the whole array handles `8*HA` non-zeros per cycle.

| module | role |
|---|---|
| `serpens_top` | wires everything; job ports and the 19 memory ports |
| `serpens_ctrl` | job sequencer (clear, per-segment x load then A stream, output phase) |
| `hbm_rd` | sequential 512-bit reader with credit-limited outstanding requests (RdX, RdA*, RdY) |
| `hbm_wr` | sequential 512-bit writer (WrY) |
| `pe_group` | the 8 PEs of one channel, 4 shared x copies, one chain stage, segment protocol |
| `spmv_pe` | x lookup, multiply, accumulate into a coalesced URAM word; clear and drain modes |
| `xbuf_bram` | one dual-port copy of the x segment, shared by two PEs |
| `acc_uram` | per-PE accumulation memory, `U*D` words of two FP32 rows |
| `arbiter_y` | fetches one coalesced word per cycle from its PEs in a fixed rotation |
| `comp_y` | 16-lane `alpha*Ax + beta*y`, one beat per cycle |
| `fp32_mul`, `fp32_add` | IEEE-754 single precision, round to nearest even, subnormals flushed |
| `serpens_pkg` | widths, the non-zero struct, memory-port structs |

Parameters of `serpens_top`, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `HA` | 16 | HBM channels (PE groups) for A; 24 for the scaled variant |
| `W` | 8192 | x segment length |
| `U` | 3 | URAM blocks per PE |
| `D` | 4096 | words per URAM at 72-bit width (UltraScale+ URAM) |
| `ACC_LAT` | 2 | minimum distance, in slots, between updates of one URAM word |
| `RD_FIFO` | 16 | beats buffered in each read engine |

With the defaults the design holds `16*HA*U*D = 3,145,728` output rows.
The number of columns is unlimited, because they are processed segment by
segment. On the FPGA the x copies take `32*HA` 36-Kbit BRAMs and the
accumulators take `8*HA*U` URAMs.

## One job, step by step

The host writes `x`, `y` and the sixteen A streams into their channels,
all starting at beat address 0. It then pulses `start` and holds
`m_rows`, `k_cols`, `alpha`, `beta` and `a_beats[c]` (the total length of
each A stream, in beats). `serpens_ctrl` then does the following:

1. It starts every stream engine and clears the URAM words the job uses.
   That is `ceil(ceil(M/16)/HA)` words per PE, one per cycle, all PEs in
   parallel.
2. For each x segment `s`, it does two things in turn:
   * **x load.** It moves the segment's `ceil(cols/16)` beats from RdX
     into the head of the chain. Each group writes a beat into its four x
     copies and passes it to the next group one cycle later. The
     controller waits `HA` cycles so that the beat reaches the last group.
   * **A stream.** It pulses `seg_start`. Each group reads one
     *instruction beat* from its channel, whose lane 0 bits `[31:0]` give
     the number `N` of element beats for this segment. It then takes those
     `N` beats, one per cycle, waits for its PE pipelines to empty, and
     raises `seg_done`. The next segment starts when every group is done.
3. **Output.** The eight arbiters each deliver `ceil(M/16)` words (two
   rows each) to CompY. CompY pairs them with the RdY beats. WrY writes
   the results, and `done` pulses after the last beat. `cycles` holds the
   length of the job.

The phases do not overlap. The job therefore takes about
`(M + K)/16 + sum over segments of max_c(N_c) + small overheads` cycles.
When the non-zeros are spread evenly, this matches the analytic model
`(M + K)/16 + NNZ/(8*HA)`. In the full-size test, a job with M = 4100,
K = 9000 and about 40,000 non-zeros takes 1264 cycles, against the
model's 1131.

## What the host must produce

The accelerator trusts its input. Here is the contract.

**Non-zero encoding.** A non-zero is 64 bits:
`{value[31:0], local_row[17:0], column_in_segment[13:0]}`. An index of all
ones (`0xFFFFFFFF`) marks an empty slot, which changes nothing. In the
element beat, lane `p` (bits `64p+63 .. 64p`) goes to PE `p` of the group.

**Row ownership.** Global row `r` is accumulated by exactly one PE:

```
PE (global)  g = ((r mod 16) div 2) * HA + ((r div 16) mod HA)
group        g div 8,  lane g mod 8
local row    2 * ((r div 16) div HA) + (r mod 2)
URAM word    local_row div 2,  half = local_row mod 2 (0 = bits [31:0])
```

With this map, output beat `b` (rows `16b .. 16b+15`) takes rows `2a` and
`2a+1` from arbiter `a`. Those come from word `b div HA` of the arbiter's
PE number `b mod HA`. Each arbiter therefore reads one PE per cycle in a
fixed rotation, and CompY gets 16 rows per cycle.

**The reordering rule.** A PE reads a URAM word, adds the product to one
half, and writes the whole word back `ACC_LAT` cycles after the read. So
two updates of the same word must be at least `ACC_LAT` slots apart in
that PE's lane. This holds for the same row (a read-after-write hazard).
It also holds for the two rows that share a word: their updates would
overwrite each other's half. The host therefore gives rows `2e` and
`2e+1` the same "colour" and keeps elements of one colour out of every
window of `ACC_LAT` consecutive slots. Where no element is allowed, it
inserts an empty slot. The lanes of a channel are then padded to equal
length.

For the 4x4 example with `ACC_LAT = 2`, one valid order is
`(0,0) (3,0) (1,0) (2,1) (0,2) (3,2) (1,2) (2,3) (0,3)`. Rows 0 and 1
share a word and are never adjacent. The same holds for rows 2 and 3. A
violation is not corrected, but each PE detects it: `conflict_seen` is set
for the job. `tb/tb_spmv_pkg.sv` contains a greedy scheduler that follows
the rule.

Accumulation order is therefore fully defined by the stream order. The
result can be reproduced bit for bit in software: for each row, add the
products `fl(value*x)` in stream order, starting from +0. Then compute
`fl(fl(alpha*acc) + fl(beta*y))`.

## Inside a PE group

Four `xbuf_bram` copies sit between PE pairs (0,1), (2,3), (4,5) and
(6,7). Each copy's port A serves the even PE and takes the beat writes
during an x load. Port B serves the odd PE. Eight random x reads per
cycle thus need no arbitration. A copy is organised as `W/16` rows of 512
bits, so a whole x beat is written in one cycle. Reads return one FP32
value a cycle later.

The PE pipeline, for an element presented in cycle `c`:

| cycle | action |
|---|---|
| c | x BRAM address = column |
| c+1 | product = value * x; URAM read of word `row>>1` |
| c+2 | sum = selected half + product; new word = sum spliced into the old word |
| c+ACC_LAT | word written back (`ACC_LAT-2` extra delay stages stand in for a deeper adder) |

The PE never stalls. It takes one element per cycle (II = 1). Clearing and
draining reuse the URAM ports, and the controller never overlaps the
three modes; an assertion checks this.

## Output path

`arbiter_y` issues a read only when its four-entry FIFO has room for it.
So back-pressure from CompY or from the write channel never loses a word.
With no stalls it delivers one word per cycle. `comp_y` joins the eight
arbiter streams with the RdY stream. It registers `alpha*Ax` and `beta*y`
for all 16 lanes in one stage and the sum in a second. It moves one beat
per cycle, and all of its stages stall together.

## Memory interface

Each channel port is reduced to what a streaming engine needs. A read
request is `{valid, addr}` with `rd_req_ready`; responses come back in
order as `rd_resp_valid`/`rd_resp_data` and are always accepted. A write
is `{valid, addr, data}` with `wr_ready`. Addresses count 64-byte beats.
An AXI adapter per channel is needed to attach this to a real HBM
controller. Assertions check that a request is held until it is accepted.

## Verification

Each module has a self-checking testbench in `tb/`. Every testbench prints
`TB_RESULT checks=N failures=M` and has a watchdog.

* `tb_fp32_mul`, `tb_fp32_add` compare tens of thousands of random
  operations, bit for bit, with a reference. The reference rounds the
  exact double-precision result to single precision.
* `tb_spmv_pe` and `tb_pe_group` stream random legal orders, with empty
  slots and gaps, and compare every URAM word. `tb_spmv_pe` also feeds an
  illegal order and checks that `conflict` fires.
* `tb_hbm_rd`, `tb_hbm_wr`, `tb_arbiter_y` and `tb_comp_y` check
  ordering, back-pressure and one transfer per cycle.
* `tb_serpens_ctrl` checks segment counts, partial segments and the
  clear length.
* `tb_serpens_top` runs three jobs end to end on a small instance (2
  groups, `W = 64`, `ACC_LAT = 3`), with random HBM stalls. It compares
  every output row bit for bit and checks the cycle count against the
  streaming bound. It also checks that each mechanism occurred: several
  segments, the chain reaching the last group, empty slots, words holding
  two live rows, and read and write back-pressure.
* `tb_serpens_full` runs the default configuration (128 PEs, `W = 8192`,
  12,288 URAM words per PE) on a job with two x segments. It then runs a
  second job with hot rows and stalls.
* `tb_serpens_a24` runs the 24-channel configuration.
* `tb_serpens_workloads` runs twelve graph-sized problems at the default
  configuration. Each has the vertex count of one of the graphs the design
  was evaluated on (38,100 to 2,450,000 rows, square) and 1/250 of its edge
  count, placed at random; the three densest matrices get hot rows.
  The real matrices are not bundled. All outputs match bit for bit, and the
  cycle counts come out 5-14% above the ideal `(M+K)/16 + NNZ/128`; the
  excess is the per-segment pipeline turnaround, empty slots and the
  clear pass. The whole run takes about 25 s.

`tb/hbm_model.sv` is a behavioural HBM channel with a fixed latency and
random ready stalls. `tb/tb_spmv_pkg.sv` generates problems, does the
reordering, and computes the reference.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/serpens_pkg.sv tb/tb_fp_pkg.sv tb/tb_spmv_pkg.sv tb/tb_serpens_top.sv \
  --top-module tb_serpens_top -o sim && ./obj_dir/sim
```

Replace the testbench file and the top name for any other test. The
full-size test builds in about 20 s and runs in well under a second.

## Departures and open points

The parts that follow the paper are these:

* channel allocation;
* widths (512-bit bus, FP32 data, 32-bit index and instruction);
* 8 PEs per channel, with four x copies shared by PE pairs;
* the x broadcast chain;
* `W`, `U` and the index coalescing;
* reordering in place of hazard logic;
* 8 arbiters of 16 PEs each;
* the CompY function;
* the segment-by-segment processing order.

The following are this implementation's own choices:

* **Row-to-PE map, index split and instruction format.** The paper does
  not define the bit split of the 32-bit index, the assignment of rows to
  PEs, or the instruction encoding. The choices above are self-consistent,
  but they are not the original host software's format.
* **Instructions in the A streams.** The instructions travel in the A
  streams, not on a channel of their own. The paper mentions an
  instruction channel in one table but counts 19 channels in total; this
  design keeps 19.
* **`ACC_LAT = 2`.** This is the value of the paper's worked example. The
  latency of a real pipelined FP adder is larger. Raise `ACC_LAT` (and the
  host's window) to match the adder you use.
* **Floating point.** The floating-point units are behavioural RTL, with
  no DSP mapping, and they flush subnormals to zero.
* **Clear pass.** The URAM clear at job start is this design's; it costs
  `ceil(M/256)` cycles at full size.
* **No overlap of phases.** x loading and A streaming do not overlap,
  which matches the paper's additive cycle model.
* **Timing closure.** It has not been attempted. The paper's results are
  from an HLS build at 223 MHz (A16) and 270 MHz (A24) on an Alveo U280.
  The FP units here are single-cycle combinational blocks inside
  registered stages.
