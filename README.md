# SID: a minimal macro-instruction engine for on-phone impostor detection

A phone's accelerometer and gyroscope record how its owner moves. A model of those
movements can notice when someone else is holding the phone. The model can be trained on the
owner's data alone, so the data never leaves the device. The Smartphone Impostor Detector (SID)
is a small hardware block that runs the whole detection algorithm next to the sensors, with no
CPU, GPU or network involved. It does not aim for maximum speed. It aims for enough speed at the
lowest hardware cost:

* New sensor readings arrive every 20 ms.
* An LSTM step of the size used for detection takes well under 1 ms on four tracks.

The best privacy-preserving detector runs an LSTM that predicts the next sensor reading. It
collects the prediction errors into an empirical distribution. It then compares that
distribution with reference distributions of the owner's errors, using a two-sample
Kolmogorov-Smirnov (KS) test, and takes a majority vote. With other users' data available,
an MLP or an SVM is used instead. SID runs all of these from one small set of vector and matrix
operations.

This repository holds synthesizable SystemVerilog for SID, with self-checking testbenches for
every unit and for the whole module. The structure follows the published design: a
macro-instruction format, an FSM that runs each instruction, four tracks of LUT, multiplier and
adder, a local scratchpad, and the memory sizes of its FPGA prototype. Where the published
description stops, this design makes its own choices. They are listed in
[Where this design departs or fills gaps](#where-this-design-departs-or-fills-gaps).

## 1. The programming model: one instruction, one whole vector operation

SID has no vector registers and no branches. Every instruction names a complete vector or
matrix operation and up to three data-RAM addresses. The hardware works out the number of
iterations from the instruction's Length and Width fields and from the number of tracks N it
was built with. Because of this, the same program runs unchanged on a SID with 2, 4 or 8 tracks
and gives bit-identical results. Sums wrap around, so the order in which tracks add does not
matter.

Instruction format (128 bits, `sid_pkg::inst_t`):

| bits    | 127:124 | 123:110 | 109:96 | 95:64  | 63:32  | 31:0   |
|---------|---------|---------|--------|--------|--------|--------|
| field   | mode    | length  | width  | addr_x | addr_y | addr_z |

Addresses count 32-bit words. Data are 32-bit two's-complement fixed point with 16 fraction
bits (Q16.16). "True" is written as 1.0 (`0x00010000`).

| mode | code | result |
|------|------|--------|
| Vadd    | 0  | z[i] = x[i] + y[i], i < length |
| Vsub    | 1  | z[i] = x[i] - y[i] |
| Vmul    | 2  | z[i] = x[i] * y[i] |
| Vsgt    | 3  | z[i] = 1.0 if x[i] > y[i], else 0 |
| Vsig    | 4  | z[i] = sigmoid(x[i]), piecewise linear |
| Vtanh   | 5  | z[i] = tanh(x[i]), piecewise linear |
| Vexp    | 6  | z[i] = exp(x[i]), piecewise linear |
| MVmul   | 7  | z[r] = sum_j X[r][j] * y[j]. X is width x length, row-major at addr_x, width <= 64 |
| VSsgt   | 8  | z[i] = 1.0 if x[i] > y[0], else 0 (a vector against a scalar) |
| Vmaxabs | 9  | z[0] = max_i \|x[i]\| |
| Vsqnorm | 10 | z[0] = sum_i x[i]^2 |
| HALT    | 15 | end of program: `done` pulses, SID goes idle |

Codes 11 to 14 are skipped. Operations needed only by older feature-based detectors (argmax,
min, second maximum, FFT, square root) are deliberately left out.

Two rules a program must follow:

* An element-wise result may overwrite its own operand in place (z = x). It must not overlap an
  operand at a different offset. The next group of operands is read before the previous results
  are written.
* The result of MVmul must not overlap its operands. A matrix with more than 64 rows is split
  into several MVmul instructions of at most 64 rows each. This costs only the few cycles of
  overhead per extra instruction, and needs no copying: the row blocks are consecutive in memory.

## 2. How an instruction runs

```
            +--------+   +------------+   +------+   +------+   +-----------+   +----+
 Instr RAM->| Fetch  |-->| Decode/FSM |-->| EXE0 |-->| EXE1 |-->|   EXE2    |-->| WR |--> data RAM
            +--------+   +------------+   | LUT  |   | MUL  |   | ADD chain |   +----+
                          read addr x,y   | xN   |   | xN   |   | scratchpad|
                          ---> data RAM --+------+   +------+   +-----------+
```

**Decode and the FSM** (`sid_control`). Decode loads three state registers from the
instruction:

* `reg_length` from Length.
* `reg_width` and `reg_width_copy` from Width.

From then on it issues one *iteration* per cycle. An iteration is N operand reads from each of
x and y, plus a small record (the uop) that travels down the pipeline with them.

* Vector modes: each iteration covers N elements. `reg_length` drops by N every cycle. The
  iteration that sees `reg_length <= N` is the last one, and it covers only the remaining
  elements.
* MVmul uses loop tiling. The matrix is processed in tiles of N columns by all Width rows, one
  row per cycle. `reg_width` counts the rows down. When the tile ends, `reg_width` is reloaded
  from `reg_width_copy` and `reg_length` drops by N. The row's partial sum waits in the
  scratchpad between tiles. The last tile writes each row's final sum to memory.

Once the last iteration is issued, the controller waits for the datapath to empty. Only then
does it fetch the next instruction, so every instruction sees the previous instruction's results
in memory. The cost of one instruction:

* vector op: ceil(length / N) iterations, plus about 7 cycles of fetch, decode and drain.
* MVmul: width x ceil(length / N) iterations, plus the same overhead.

The `stalled` output is high while the controller waits for the drain.

**The tracks** (`sid_datapath`). Each of the N tracks has a look-up table in EXE0, a
multiplier in EXE1 and an adder in EXE2. The same three units serve every mode:

| mode | EXE0 | EXE1 (MUL) | EXE2 (ADD) |
|------|------|------------|------------|
| Vadd / Vsub        | -                   | x * 1.0       | +y / -y |
| Vmul               | -                   | x * y         | +0 |
| Vsgt / VSsgt       | -                   | x * 1.0       | compare with y (VSsgt: y[0]) |
| Vsig / Vtanh / Vexp| LUT gives k, b for x | k * x        | + b |
| MVmul              | -                   | X[r][j+i] * y[j+i] | chained sum + scratchpad[r] |
| Vsqnorm            | -                   | x * x         | chained sum + scratchpad[0] |
| Vmaxabs            | -                   | x * (+/-1.0) = \|x\| | chained max with scratchpad[0] |

The non-linear functions therefore need no unit of their own. The LUT comes before the
multiplier and the adder, so they compute the linear interpolation k*x + b.

The reductions need no adder tree either. The N adders of EXE2 are chained:

1. p0 + p1
2. + p2
3. + p3
4. + the partial sum from the scratchpad

That is exactly N adders. For Vmaxabs the same chain compares instead of adding, and keeps the
larger value. Lanes beyond the end of a vector get zero operands. Zero does not change a sum,
and it does not change a maximum of absolute values.

**Timing.** The read address leaves Decode in cycle t. The operands reach EXE0 in cycle t+1.
The result is written to the data RAM at the end of cycle t+4. There is no back-pressure inside
the datapath.

## 3. The KS test as five instructions

The main new idea of the design is to compare error distributions with the same multipliers
and adders. The reference distribution is stored as two vectors:

* B histogram bin boundaries.
* The reference cumulative histogram on those bins.

The test distribution is never stored as raw errors. Each new error is folded into a test
cumulative histogram at once. One reading then costs five instructions:

```
VSsgt   bits = bins > err         # 1: which boundaries lie above the new error
Vadd    hist = hist + bits        # 2: cumulative histogram of the test errors
Vsub    diff = hist - ref         # 3
Vmaxabs md   = max |diff|         # 4: n * D(n,m), the KS statistic times n
VSsgt   abn  = md > T             # 5: T = n * c(alpha) * sqrt((n+m)/(n*m))
```

Multiplying the KS inequality by n avoids a division. With n = m, T is a constant worked out
in advance.

Worked example (the end-to-end testbench checks every number here):

* Bins: {1.2, 1.6, 3.0, 4.3, 5.0}.
* Reference cumulative histogram: {0, 1, 2, 3, 4}.
* Errors, in arrival order: 4.5, 3.5, 9.5, 0.5, 4.9.

The test histogram grows as {0,0,0,0,1}, {0,0,0,1,2}, {0,0,0,1,2}, {1,1,1,2,3}, {1,1,1,2,4}.
The final difference is {1, 0, -1, -1, 0}. Its maximum absolute value is 1, which is below
T = 5 x 1.22 x sqrt(10/25), about 3.86. The sample is therefore judged normal.

To vote against R reference distributions:

1. Steps 3 and 4 run once per reference, each writing its maximum into one slot of a vector.
2. One VSsgt compares that whole vector with T.
3. Vsqnorm counts the ones: 1.0 squared is 1.0.
4. A last VSsgt compares the count with R/2.

The result word is 1.0 if the phone is judged to be in an impostor's hands.

## 4. Memories and interfaces

**Data RAM** (`sid_data_ram`, `sid_ram_bank`). The default is 458,752 words, which is 1.75 MB.
Each cycle it serves the pipeline with:

* two N-word reads, one for x and one for y;
* one N-word write, masked per lane.

All three may start at any word address. To do this, the RAM is split into N banks,
interleaved on the low address bits. A read of N consecutive words touches each bank exactly
once. A word whose address wraps past the end of its row is read from the next row of its
bank. The bank outputs are then rotated into lane order.

A fourth port, one word wide, belongs to the host and the sensors. If it writes the same word
as the pipeline in the same cycle, it wins. All reads return data one cycle after the address.

**Instruction RAM** (`sid_inst_ram`). The default is 8,192 instructions of 128 bits, which is
128 KB. It has a synchronous read for Fetch and a write port for the host.

**Scratchpad** (`sid_spad`). 64 words (256 bytes), with a combinational read and a synchronous
write, both in EXE2. Its size is what limits MVmul to 64 rows per instruction.

**Top-level ports** (`sid_top`):

| group | signals | behaviour |
|-------|---------|-----------|
| program load | `imem_we, imem_addr, imem_wdata` | writes one instruction |
| data access  | `dmem_en, dmem_we, dmem_addr, dmem_wdata, dmem_rdata, dmem_gnt` | one word per cycle. Read data arrives the next cycle. `dmem_gnt` is low while a sensor word uses the port, so the host must retry |
| LUT load     | `lut_we, lut_fn, lut_seg, lut_k, lut_b` | writes slope and intercept of one segment into every track's table |
| sensors      | `sensor_valid, sensor_data, sensor_last, sensor_base` | word k of a reading goes to `sensor_base + k`. The word flagged `sensor_last` ends the reading and restarts the program at instruction 0. A program that is still running is abandoned after its in-flight writes complete |
| control      | `start, running, done, stalled` | `start` restarts at instruction 0. `done` pulses when HALT retires |

The detection result is a word in the data RAM. The host reads it, or a later stage of the
phone's SoC does.

**LUT contents.** Each function has 64 segments, each 0.25 wide, covering [-8, 8). Segment s
covers [x0, x0 + 0.25) with x0 = (s - 32) / 4. An input x uses segment
clamp(floor(4x) + 32, 0, 63) and returns k*x + b.

The testbenches load chords of the true function on each segment:

* k = (f(x0 + 0.25) - f(x0)) / 0.25
* b = f(x0) - k * x0

In the two end segments they load k = 0 and b = the function's value at the edge. With these
tables, the sigmoid and tanh errors are below 0.01. Any other table can be loaded, for example
one that trades range for precision.

**Arithmetic.** Products keep bits 47:16 of the 64-bit product. This rounds toward minus
infinity and does not saturate. Sums wrap around. Comparisons are exact: they use the sign of a
33-bit difference.

## 5. Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `N`          | 4      | parallel tracks (a power of two, at least 2) |
| `DMEM_WORDS` | 458752 | data RAM words (1.75 MB) |
| `IMEM_DEPTH` | 8192   | instruction RAM entries (128 KB) |
| `SPAD_WORDS` | 64     | scratchpad words (256 B): the largest MVmul width |
| `LUT_SEGS`   | 64     | LUT segments per function |
| `LUT_FRAC`   | 2      | segment width 2^-LUT_FRAC |

The published prototype used 4 tracks, a 256-byte scratchpad, 1.75 MB of data RAM, 128 KB of
instruction RAM and 32-bit fixed point. Everything else in the table is this design's choice.

After coarse synthesis with yosys, the default configuration has about 700 word-level cells
and about 1,260 flip-flop bits outside the memories. The memories hold 15.8 Mbit.

## 6. What fits

| model | words needed | fits in 458,752? |
|-------|--------------|------------------|
| MLP-500 on 64 readings x 6 axes | 193,001 | yes |
| MLP-200-100 | 97,201 | yes |
| LSTM with 200 hidden units + prediction layer | 166,806 + reference distributions | yes |
| LSTM with 500 hidden units | 1,017,006 | **no**: the gate matrix alone is 4 MB |
| SVM / one-class SVM | 384 per support vector | depends on the support-vector count |

These counts come from the layer sizes. The published text gives no support-vector counts.
The window length (64 or 200 readings) adds no storage, because the test histogram is updated
reading by reading.

How long the models take, simulated at the default sizes (`tb_sid_workloads`) and converted at
the prototype's 115 MHz:

| model | instructions | iterations | cycles | time |
|-------|--------------|------------|--------|------|
| PED-LSTM-Vote, 200 hidden units, 10 references x 32 bins, one reading | 49 | 42,737 | 43,084 | 0.375 ms |
| MLP-200-100 on 384 inputs | 13 | 24,377 | 24,472 | 0.213 ms |
| Gaussian-kernel SVM, 8 support vectors | 21 | 1,544 | 1,695 | 0.015 ms |

The LSTM step is dominated by its 800 x 206 gate matrix: 800 x 52 = 41,600 iterations. All of
these are far inside the 20 ms between sensor readings. Read off the published bar chart (it
prints no values), the prototype's times are about 0.2 ms for MLP-200-100 and about 0.37 ms for
the plain LSTM detector of the same size, which is close to the cycle counts here. The
published PED-LSTM-Vote times are higher (about 0.7 ms and 3.9 ms for the two window lengths).
They depend on the number of references and bins, which are not published. The SVM time scales
with the support-vector count: about 190 iterations per support vector.

## 7. Where this design departs or fills gaps

Taken from the published design:

* the instruction format and its bit positions;
* the eleven operations;
* the reg_length / reg_width / reg_width_copy FSM and its tiling order;
* N tracks of LUT -> MUL -> ADD in three execution stages, with WR after them;
* chained EXE2 adders instead of an adder tree;
* the scratchpad's roles in MVmul, Vmaxabs and Vsqnorm;
* interpolation by LUT slope and intercept;
* the five-step KS procedure;
* sensor input restarting the program;
* the memory sizes and 32-bit fixed point.

This design's own choices:

* **Mode codes, HALT, skipping unknown codes.** The published format gives only the field
  widths.
* **Q16.16.** The binary point is not specified. 1.0 stands for "true".
* **Drain between instructions.** No hazard handling is described. Draining is simple and
  always correct. It costs about 7 cycles per instruction, so it matters only for very short
  vectors. Overlapping independent instructions would be a later optimisation.
* **64-row MVmul limit.** Tiling keeps one partial sum per row, so a 256-byte scratchpad cannot
  hold the 800 rows of an LSTM-200 gate matrix. Programs split such matrices. The published
  description does not discuss this.
* **Banked, unaligned data RAM and its port set.** The published description only says that
  operands live in memory.
* **Programmable LUT, its segment layout, and its load port.**
* **Interface protocols** for the host, the sensors and the LUT. `dmem_gnt` gives the sensors
  priority.
* **|x| for Vmaxabs** is computed by the multiplier (x times +/-1.0), so no extra negation unit
  is needed.
* **Word addressing and row-major matrices.**

The published design gives no cycle-level timing, so none of it is matched here. The execution
times it reports were not reproduced.

## 8. Files and simulation

`rtl/` contains one module or package per file:

* `sid_pkg`
* `sid_inst_ram`
* `sid_data_ram` and its bank `sid_ram_bank`
* `sid_lut`
* `sid_mul`
* `sid_add`
* `sid_spad`
* `sid_datapath`
* `sid_control`
* `sid_top`

`tb/` has one self-checking testbench per unit. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_sid_top` | The whole module at default sizes. First, the KS example above, driven through the sensor port. Then one LSTM step (6 inputs, 16 hidden units, so the 64-row gate MVmul fills the scratchpad), its prediction error and PED update, a 4-reference KS vote, an MLP layer with ReLU, and a Gaussian-kernel term. Every result word is compared with a sequential model of the instruction set, and the LSTM state with real arithmetic. Every mode, stall, multi-tile MVmul, partial iteration, sensor restart and restart of a running program must occur at least once. |
| `tb_sid_workloads` | The models of section 6 at default sizes. PED-LSTM-Vote with 200 hidden units runs over two sensor readings. MLP-200-100 and an 8-vector Gaussian SVM run on a 384-value window. Results are compared bit-exactly with the instruction-set model, and LSTM and MLP outputs with real arithmetic. The cycle counts are checked against the iteration counts. |
| `tb_sid_scaling` | Modules with 2, 4 and 8 tracks run one unchanged program side by side (an LSTM step, PED vote, MLP layer and kernel term, all eleven modes). Their results must be identical and match the instruction-set model. Each cycle count must match its iteration count, and more tracks must be faster: 2,782, 1,522 and 936 cycles. |
| `tb_sid_control` | Every issued iteration (addresses, lanes, flags, row, result address) against the instruction definitions. One iteration per cycle, skipping of unknown codes, HALT, restart. |
| `tb_sid_datapath` | All modes fed directly into EXE0: results, addresses, lane masks, and the three-edge EXE0-to-WR latency. |
| `tb_sid_data_ram` | Unaligned N-word reads and masked writes against a model, and host-over-pipeline write priority. |
| `tb_sid_add`, `tb_sid_mul`, `tb_sid_lut`, `tb_sid_spad`, `tb_sid_inst_ram` | Each unit against arithmetic done in the testbench. |

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl rtl/sid_pkg.sv \
          tb/tb_sid_top.sv --top-module tb_sid_top -o sim
./obj_dir/sim
```

Verilator has no X state, so every register that is read is either reset or written before
use. The memories are not reset.
