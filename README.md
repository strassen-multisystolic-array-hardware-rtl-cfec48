# Strassen multisystolic array (SMM) in SystemVerilog

Strassen's algorithm multiplies two 2x2 block matrices with 7 block products
instead of 8, at the price of 18 block additions. On CPUs and GPUs the extra
additions and the traffic for the intermediate matrices eat the gain unless
the matrices are very large. This design puts the algorithm into a systolic
array instead: the additions are done by small adder vectors in the same
pipeline that feeds the multipliers, so they cost no time. The saving then
shows up as hardware. One Strassen level needs 7 systolic arrays where
conventional blocking needs 8. With R levels an SMM_R array does the work of
8^R arrays with 7^R of them, a factor (8/7)^R fewer multipliers (1.31 for
R = 2) at the same throughput per cycle.

Because the work is spread over many small arrays (a *multisystolic* design),
small matrices still keep every multiplier busy. An SMM_R array built from
X x Y arrays reaches full rate for products as small as 2^R*Y x 2^R*Y. A
single X*2^R-wide array of the same throughput would need matrices 2^R times
larger.

The RTL follows the architecture published by T. E. Pogue and N. Nicolici,
"Strassen Multisystolic Array Hardware Architectures", IEEE Trans. VLSI
Systems, 2025. The paper's main configuration is the default here:

| parameter | default | meaning |
|---|---|---|
| `W` | 16 | signed fixed-point operand width |
| `R` | 2 | Strassen recursion levels |
| `X`, `Y` | 6, 6 | width and height of each lowest-level systolic array |
| `Q_EXTRA_REGS` | 0 | 1 adds a pipeline register inside every Q addition vector |

That gives 7^2 = 49 arrays of 6 x 6, which is 1764 multipliers of 18 x 18 bits.
The smallest product at full rate is 24 x 24, and a 24 x 24 product takes 6
cycles of array time. The same RTL builds the paper's other evaluated
configurations by parameter: SMM_1 16x16, and the 8-bit SMM_1 32x32 and
SMM_2 8x8.

## The arithmetic of one level

At each level, A (size M x K) and B (size K x N) are cut into quadrants. The
design then computes

```
T1 = A11 + A22   S1 = B11 + B22   Q1 = T1 S1      C11 = Q1 + Q4 - Q5 + Q7
T2 = A21 + A22   S2 = B11         Q2 = T2 S2      C12 = Q3 + Q5
T3 = A11         S3 = B12 - B22   Q3 = T3 S3      C21 = Q2 + Q4
T4 = A22         S4 = B21 - B11   Q4 = T4 S4      C22 = Q1 - Q2 + Q3 + Q6
T5 = A11 + A12   S5 = B22         Q5 = T5 S5
T6 = A21 - A11   S6 = B11 + B12   Q6 = T6 S6
T7 = A12 - A22   S7 = B21 + B22   Q7 = T7 S7
```

In hardware (`smm_mxu`) these are three adder units around seven sub-arrays:

* `a_add_vec` has five adder/subtractor vectors, and `b_add_vec` has five more.
  They form T1..T7 and S1..S7 element by element, one vector per cycle.
* Seven copies of `smm_mxu` with `R-1` multiply the T/S pairs. At `R = 0` the
  recursion ends in `mm_mxu`, a plain systolic array.
* `q_add_vec` has eight adder vectors (six, then two). It forms the four C
  quadrants from Q1..Q7.

The module instantiates itself with `R-1`, so any depth can be built from one
source. The parameter `R` of `smm_mxu` defaults to 0, a single array, and
`smm_top` sets it to 2. With a default of 1 or more, linting `smm_mxu` on its
own would make it instantiate itself as the top module. Verilator drops those
inner instances and reports the sub-array wires as undriven.

**Widths.** Every level widens T and S by one bit, so the lowest-level
multipliers take `W+R`-bit operands. T3, T4, S2 and S5 are plain copies, but
they are sign-extended too so that all seven sub-arrays are identical. Each
lowest-level array accumulates into `2(W+R) + ceil(log2 X)` bits (39 bits at
the defaults). That width is `smm_pkg::cw()`.

The Q and C adders do **not** widen. They work modulo 2^cw and may wrap. This
is exact, because the only result that leaves the MXU is the final C, and the
final C always fits. Each C element is a sum of `X*2^R` products of two `W`-bit
numbers, which needs at most `2W + R + log2 X` bits, fewer than `cw`. Every
operation in between is a ring operation (add, subtract, multiply), so the
wrap-around in the intermediate Q values cancels out. Only the multiplier
*inputs* must not wrap, and the one-bit growth per level guarantees that.

## Vectors and the order of sub-blocks

Strassen is applied R times. A GEMM tile therefore splits into a 2^R x 2^R grid
of sub-blocks, 4^R in all. A sub-block of A is `m x X`, a sub-block of B is
`X x Y` and a sub-block of C is `m x Y`. The MXU never stores T, S or Q
matrices. Instead, every cycle it receives one **vector**:

* An A vector holds row i of *every* A sub-block.
* A B vector holds column j of every B sub-block.
* A C vector holds row i of every C sub-block.

All additions at every level then act on the vector that is present, and
intermediate matrices simply flow through.

The memories store each vector in one word (`vec_mem`):

* **A word `t*m + i`** holds rows i, i+m, ..., i+(2^R-1)m of A tile t,
  concatenated. Element `(p*2^R + q)*X + k` of the word is `A_t[p*m+i][q*X+k]`,
  so the sub-blocks are in row-major order.
* **B word `t*Y + j`** uses the transposed order. Element `(q*2^R + p)*X + k` is
  `B_t[p*X+k][q*Y+j]`.
* **C word `i`** has the A layout with `Y` in place of `X`. A result can
  therefore be fed back as the A operand of a later product.

Inside the MXU the sub-blocks are reordered into a **quadtree** order. The
index is the bits of the block row p and block column q interleaved, with p as
the more significant bit of each base-4 digit (`smm_pkg::qt_index`). In this
order, every quadrant at every level is a contiguous slice. Codes 0, 1, 2 and 3
stand for quadrants 11, 12, 21 and 22. `smm_top` converts between the two
orders with wiring only.

## The lowest-level array and its timing

`mm_mxu` is an `X x Y` weight-stationary array of `smm_pe` cells:

* **Columns.** Element k of an A vector enters column k at the top. It moves
  down one row per cycle, registered in every PE.
* **Rows.** Each row holds one column of the stationary B sub-block. It
  multiplies and adds left to right, with the partial sum registered in every
  PE, and its dot product leaves at the right edge.
* **Skew.** The inputs must be skewed, with lane k one cycle behind lane k-1.
  The outputs come out skewed the other way. Triangular buffers (`tri_buf`)
  at the MXU boundary handle both: lane k of every A and B sub-block is delayed
  k cycles on the way in, and element j of every C sub-block is delayed j
  cycles on the way out. All adder vectors work lane by lane, so the skew
  passes through them unchanged.

**Double-buffered B.** Every PE has two B registers. A tile's B is loaded into
the spare register while the previous tile's A rows still use the other one.
Each A element carries a one-bit bank number that picks the register it is
multiplied with.

The B elements travel down the columns in the same way as A. Each carries
three things: a write enable, the bank to write, and the row it is meant for.
The loader sends column j of the B tile to row `Y-1-j`. Because a B load moves
down a column at exactly the speed of A, two guarantees follow:

* A register is never overwritten before the last A row that needs it has
  passed.
* The first A row of a new tile never overtakes its B load.

The sequencer can therefore start the next load into a bank as soon as the
last A row of the tile that used the bank has been *issued*. It does not have
to wait for that row to drain. (Shifting a column of B registers all at once
would have needed that wait.)

**Latency.** Every Strassen level adds one register in the A/B adders and
one in the Q adders. With `Q_EXTRA_REGS = 1` the Q adders add two. Counted from
lane 0 of an A vector entering the input skew buffer to the de-skewed C
vector, the latency is

```
X + Y + R*(2 + Q_EXTRA_REGS)      (16 cycles at the defaults)
```

This value is `smm_pkg::mxu_latency`. A new A vector is accepted every cycle.

## Running a GEMM: `smm_top`

`smm_top` wraps the MXU into a small engine with host-facing memories. One
command computes C = A B, where:

* A is `2^R*m x 2^R*X*k_tiles` (up to 256 x 240 at the defaults);
* B is `2^R*X*k_tiles x 2^R*Y`, so it is always 24 columns wide at the defaults.

The K dimension is cut into `k_tiles` GEMM tiles, and `smm_ctrl` runs two
processes at once:

* **B loader.** It reads the Y columns of B tile t into buffer `t % 2`. It may
  start tile t only after A tile t-2, the previous user of that buffer, has
  been issued.
* **A streamer.** It reads the m rows of A tile t, one per cycle, tagged with
  buffer `t % 2`. It may start tile t only after the whole of B tile t has been
  issued. Otherwise it **stalls**, and the `stall` signal is high.

If `m >= Y`, each B load fits behind the A stream of the previous tile. The
MXU then takes one A row per cycle without a gap, and a command takes
`Y + m*k_tiles` cycles of issue plus the pipeline latency. This is where the
paper's claim comes from: with R levels, an n x n product (n = 2^R*m) needs
only n/2^R cycles of array time, down to n = 2^R*Y. With `m < Y`, the A
streamer waits for B and throughput falls.

Row tags travel in a delay line beside the MXU. Each tag holds the row index,
a first-tile flag and a last-row flag. `c_accum` uses them to handle each C row:

* a row from the first K tile overwrites the stored row;
* rows from later tiles are added to it.

Sums are kept `ACC_W` bits wide. The default is `cw + ceil(log2(KT_MAX+1))` =
43 bits.

**Interface and timing of `smm_top`:**

* **Operand memories.** Write A with `a_wr_*` and B with `b_wr_*` while the
  engine is idle. Each write stores one word in the layout given above.
* **Command.** Pulse `start` with `m_rows` (1..`C_DEPTH`) and `k_tiles`
  (1..`KT_MAX`). The memories must hold `m*k_tiles` A words and `Y*k_tiles`
  B words.
* **Status.** `busy` stays high until the last C row has been accumulated.
  `done` pulses for one cycle at that point. At full rate, `done` rises
  `m*k_tiles + 1 + latency` cycles after the first A read.
* **Results.** Read C one word per address with `c_rd_addr`. `c_rd_data`
  follows one cycle later.
* **Reset.** `rst_n` is synchronous and active low. It resets only the
  control path. The datapath is not reset, and nothing it holds is used before
  it has been written.

## Files

| file | contents |
|---|---|
| `rtl/smm_pkg.sv` | quadrant codes, width and latency functions, quadtree index |
| `rtl/smm_pe.sv` | MAC cell with double-buffered B and pass-down B load |
| `rtl/mm_mxu.sv` | X x Y systolic array (recursion base) |
| `rtl/a_add_vec.sv`, `rtl/b_add_vec.sv`, `rtl/q_add_vec.sv` | Strassen adder vectors of one level |
| `rtl/smm_mxu.sv` | recursive SMM_R MXU |
| `rtl/tri_buf.sv` | triangular skew/de-skew shift registers |
| `rtl/vec_mem.sv` | one-vector-per-word operand memory |
| `rtl/smm_ctrl.sv` | GEMM tile sequencer |
| `rtl/c_accum.sv` | accumulator for partial tile products |
| `rtl/smm_top.sv` | the engine |

## Simulating

All testbenches are self-checking. Each prints `TB_RESULT checks=N failures=M`
and ends with `$finish`, and each has a watchdog. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/smm_pkg.sv tb/tb_smm_top.sv \
          --top-module tb_smm_top -Mdir obj_top
./obj_top/Vtb_smm_top
```

The default-size engine builds in about a minute and runs in well under a
second.

* **Unit tests.** `tb_smm_pe`, `tb_mm_mxu`, `tb_a_add_vec`, `tb_b_add_vec`,
  `tb_q_add_vec`, `tb_tri_buf`, `tb_vec_mem`, `tb_smm_ctrl` and `tb_c_accum`
  compare each unit with a reference computed in the testbench. Adders are
  checked against integer Strassen equations. The PE and the memories are
  checked against cycle-level models. For the sequencer, every cycle is
  checked against the issue rules above, and the full-rate cycle count against
  `Y + m*k_tiles`.
* **`tb_smm_mxu`.** Runs the recursive MXU at R = 2 with small arrays and the
  Q pipeline option. It checks two tiles with an overlapped B load against
  triple-loop products, at the cycle the latency formula predicts.
* **`tb_smm_top`.** Runs the engine at its default parameters.
  `smm_top_driver` holds the shared stimulus. The runs cover:
  * the smallest full-rate product;
  * several K tiles, checking for a gap-free A stream and the exact time to
    `done`;
  * short tiles that force stalls;
  * operands at the extremes of the signed range;
  * the largest tile count the memories allow.

  It counts stall cycles, overlapped B-load cycles and accumulating runs, and
  fails if any of them never happened.
* **`tb_smm_top_xregs`, `tb_smm_top_r1_16` and `tb_smm_top_r2_8`.** Repeat
  that test for the paper's other configurations. The 32x32 8-bit SMM_1 is not
  simulated: at that size the simulator build takes too long. Its datapath
  differs from the 16x16 SMM_1 only in the array size.
* **`tb_smm_top_resnet`.** Runs the default build on slices of ResNet layers,
  as a deep-learning accelerator would use it. A convolution becomes a GEMM
  with K = C_in * k * k. Activations are 8-bit unsigned, as after ReLU, and
  weights are 8-bit signed. K is padded with zeros to whole 24-wide tiles. Two
  slices run:
  * the 7x7 first layer, K = 147 padded to 168 (7 tiles), 144 output pixels
    by 24 output channels;
  * a 1x1 layer with 64 input channels, K = 64 padded to 72 (3 tiles), 256
    output pixels by 24 output channels.

  A whole layer repeats such slices over pixel and channel blocks. That outer
  loop, and the rescaling between layers, belong to the host system and are not
  part of this design.

## What follows the paper and what does not

These parts follow the paper:

* the Strassen equations and the 7^R structure;
* the adder vectors and their counts;
* the one-bit growth per level and the accumulator width `2w + ceil(log2 X)`;
* the vector memory layout;
* the weight-stationary array, with A entering from the top and partial sums
  flowing right;
* the double-buffered B register in each PE;
* the triangular skew buffers;
* the optional extra registers in the Q adders;
* accumulation of tile products outside the MXU.

These are choices of this design, where the paper gives no detail:

* where the pipeline registers sit (one per adder unit per level; with the
  option, one between the two adder levels of each Q unit);
* the Q adder tree and its non-widening modular width;
* the bank bit carried with A and the row-addressed, pass-down B load;
* the quadtree order inside the MXU;
* the sequencer rules;
* the memory sizes (A: 256 words, B: 64 words, C: 64 rows, up to 10 K tiles),
  the host interface and the reset scheme.

The paper draws the Q adders as negations followed by four-input adders. Here
they are a two-level tree that computes the same sums.

The widths of the adder vectors differ from the paper's count. The paper gives
each A/B adder vector K scalar adders, K being the width of a quadrant, and
says the count halves at every level. That count holds for one level. With R
levels, however, a vector carries a row of *every* lowest-level sub-block, as
the paper's memory layout requires. A quadrant slice at the top level then
holds 2^(R-1) rows of K elements. To keep one vector per cycle, each adder
vector here is `4^(R-1)*X` wide: 24 rather than 12 at the top of SMM_2 6x6.
The count drops by a factor of four per level, and the Q adders likewise.

These parts are not included:

* the surrounding deep-learning accelerator of the paper's system
  measurements, which comes from the authors' earlier work;
* that accelerator's post-GEMM quantisation unit;
* the combination with fast inner-product (FFIP) arrays;
* the FPGA DSP mapping: multipliers are written as `*` and left to synthesis.

A single command of `smm_top` produces one 24-column block of C. Covering
larger N, or a whole network layer, needs an outer loop on the host.

Clock frequency and resource figures depend on the FPGA flow and have not been
reproduced.
