# A multiplier-light matrix-vector unit for scalar-quantized networks

When the weights of a layer are compressed by scalar quantization, each row
of the weight matrix holds only K distinct values: the row's cluster centers
c_1 .. c_K. Each weight is then just a small index p_i telling which center it
equals. With K = 16, a weight takes 4 bits instead of 32. That makes the
matrix small enough for on-chip LUT RAM, and it also changes the arithmetic
of a dot product:

    w . a  =  sum_i c_{p_i} a_i  =  sum_k c_k * S_k,   where  S_k = sum of a_i over all i with p_i = k

A row of n weights still needs n additions, but only K multiplications
instead of n. Rows usually have more than a thousand weights and K is at most
16. On an FPGA, a floating-point multiply is far more costly than an add, so
this regrouping is where the speed comes from.

This RTL computes y = W a in that way, in IEEE-754 single precision, one
weight per clock cycle. The weights are quantized row by row, so every row
has its own set of K centers ("fine-grained" quantization). A fully
connected layer is used as it is. A convolutional layer with
n x m x h x w weights is first reshaped into an n x (m*h*w) matrix.

The centers and indices come from training. The DP-Net scheme picks the
centers of each row with a dynamic-programming algorithm that gives the
optimal one-dimensional k-means clustering. The hardware does not do this:
software loads the results into the memories.

## Data layout

A compressed row is stored the way it is shown below, for nine weights with
two centers (1-bit indices):

    dense:      3.5  3.5  7.2  7.2  7.2  3.5  3.5  3.5  7.2     (9 x 32 bits)
    quantized:  0    0    1    1    1    0    0    0    1       (9 x 1 bit)
                centers: 3.5  7.2                              (2 x 32 bits)

The three memories use these layouts:

| memory       | word                      | address            | default depth |
|--------------|---------------------------|--------------------|---------------|
| `index_mem`  | log2(K)-bit cluster index | `row*cols + col`   | 1,024,000     |
| `center_mem` | binary32 center           | `row*K + k`        | 16,000 (1000 rows x 16) |
| `vector_mem` | binary32 vector element   | `col`              | 1,728         |

The defaults are sized for the two layers the design was measured on: a
fully connected layer of 1000 x 1024 and a convolutional layer reshaped to
384 x 1728, both with K = 16 (4-bit indices). One index is stored per word,
not packed. Each memory has one write port, used for loading, and one read
port with a registered output (one cycle of latency). That is the usual shape
of LUT RAM with an output register.

## The row schedule

`dpnet_ctrl` handles the matrix one row at a time. A row of `cols` weights
takes `cols + K + 2` cycles:

| phase | cycles | what happens |
|-------|--------|--------------|
| ACC   | `cols` | Read index `p_j` and element `a_j` for j = 0, 1, ... One cycle later, `cluster_accum` adds `a_j` into the sum `S_{p_j}`. |
| MAC   | `K`    | Read center `c_k` for k = 0 .. K-1. One cycle later, `center_mac` adds `c_k * S_k` into the row result. The last addition of the ACC phase lands in this phase's first cycle, one cycle before S_0 is first read. |
| WAIT  | 1      | The last product is added. |
| OUT   | 1      | `y_valid` is high, with `y_row` and `y_data`. The K sums and the accumulator are cleared at the end of the cycle. |

A run of `rows x cols` therefore takes `rows*(cols+K+2) + 1` cycles from the
clock edge that accepts `start` to the cycle in which `done` is high. At
100 MHz:

| layer | matrix | cycles | time |
|-------|--------|--------|------|
| fully connected | 1000 x 1024 | 1,042,001 | 10.42 ms |
| convolutional   | 384 x 1728  | 670,465   | 6.70 ms  |

The FPGA implementation this design follows reported 11.9 ms and 7.60 ms for
these two layers. That is 5.1x and 5.2x faster than a pipelined binary32
multiply-add over the uncompressed matrix, which takes about 6 cycles per
weight. How the original spent its extra 12-16% is not known. Here the MAC
phase does not overlap the next row's ACC phase. That would save K + 2 cycles
per row, at the cost of a second set of sums.

### Why there are no hazards

The sums `S_k` are K registers that share one binary32 adder. The adder is
combinational: the selected sum is read, added to and written back in the
same cycle. Two weights of the same cluster in a row therefore need no
forwarding and no stall. The MAC works the same way: one combinational
multiplier, then one combinational adder, then the accumulator register. The
cost is a long combinational path, so this design does not try to meet
timing at 100 MHz. To pipeline the adder, the bin update would need
forwarding, or a stall when an index repeats within the adder's latency.

## Arithmetic

`fp32_add` and `fp32_mul` are IEEE-754 binary32 units with round to nearest,
ties to even. They depart from IEEE in these ways:

- Subnormal inputs are read as zero.
- A result that would be subnormal is flushed to zero, keeping its sign.
- Every NaN result is the quiet NaN `0x7FC00000`.
- An exact cancellation gives +0.

The order of operations is fixed, so results are deterministic, bit for bit:

- Each sum `S_k` adds its elements in column order.
- Each product `c_k * S_k` is rounded before it is added; there is no fused
  multiply-add.
- The K products are added for k = 0 .. K-1, starting from +0.

A result can differ from a dense dot product over the expanded row by normal
rounding error, because the additions happen in a different order. A cluster
with no members has `S_k = 0` and contributes `c_k * 0`.

## Files and interface

| file | role |
|------|------|
| `rtl/dpnet_pkg.sv` | binary32 type and fields, controller states, default sizes |
| `rtl/fp32_add.sv`, `rtl/fp32_mul.sv` | combinational binary32 adder and multiplier |
| `rtl/index_mem.sv`, `rtl/center_mem.sv`, `rtl/vector_mem.sv` | the three memories |
| `rtl/cluster_accum.sv` | the K sums S_k |
| `rtl/center_mac.sv` | sum of c_k * S_k |
| `rtl/dpnet_ctrl.sv` | row schedule |
| `rtl/dpnet_accel.sv` | top level |

The ports of `dpnet_accel` (widths are for the defaults):

- `clk`, `rst_n`: the reset is asynchronous and active low. The memories
  are not reset.
- `idx_we/idx_waddr[19:0]/idx_wdata[3:0]`, `ctr_we/ctr_waddr[13:0]/ctr_wdata[31:0]`,
  `vec_we/vec_waddr[10:0]/vec_wdata[31:0]`: the load ports. Write only while
  `busy` is low; an assertion checks this.
- `start`, `rows[9:0]`, `cols[10:0]`: `rows` and `cols` are sampled when
  `start` is accepted (in idle). A run must fit the memories: rows at most
  MAX_ROWS, cols at most MAX_COLS, and rows*cols at most IDX_DEPTH; an
  assertion checks this. A run with zero rows or zero columns only pulses
  `done`.
- `busy`, `done`: `done` is a one-cycle pulse.
- `y_valid`, `y_row[9:0]`, `y_data[31:0]`: one result per row, in row order.
  There is no back-pressure.

The parameters are `K` (default 16), `MAX_ROWS` (1000), `MAX_COLS` (1728)
and `IDX_DEPTH` (1,024,000). K must be at least 2. With K = 2, 4 or 8 the
same design runs the 1-, 2- and 3-bit codebooks.

## Testbenches

Each testbench checks itself and prints `TB_RESULT checks=N failures=M`. The
reference model, `tb/fp_ref_pkg.sv`, does not reuse any design code. It widens
each operand to double precision, operates in double, and rounds back to
binary32 with integer operations on the double's bits. This is exact for
products, and correctly rounded for sums, because double precision has more
than twice as many significand bits as binary32.

- `tb_fp32_add`, `tb_fp32_mul`: directed special cases, then 100,000 random
  pairs each, compared bit for bit.
- `tb_index_mem`, `tb_center_mem`, `tb_vector_mem`: fill and scrambled
  read-back at the default sizes, plus the read-during-write behaviour (the
  old word is returned).
- `tb_cluster_accum`, `tb_center_mac`: random streams, including repeated
  indices, empty clusters, clear and hold.
- `tb_dpnet_ctrl`: every output, cycle by cycle, against the schedule above.
- `tb_dpnet_accel`: end to end with reduced memories. It counts that every
  mechanism occurs, checks the result values and the cycle count, and covers
  shape changes, vector reloads and zero-row runs.
- `tb_dpnet_kbits` (with helper `dpnet_kcase`): K = 2, 4 and 8. It includes
  the nine-weight example above, compared with the dense dot product.
- `tb_dpnet_full`: the 1000 x 1024 and 384 x 1728 layers at the default
  parameters, with all results and both cycle counts checked. It runs in a
  few seconds.

To run one testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        tb/fp_ref_pkg.sv rtl/dpnet_pkg.sv rtl/*.sv tb/dpnet_kcase.sv \
        tb/tb_dpnet_full.sv --top-module tb_dpnet_full -o sim
    ./obj_dir/sim

Swap in another testbench with `--top-module`. The memory testbenches need
only the package and their own module.

## What is the design's own and what is not

The following are taken from the source design:

- the regrouped dot product, with K multiplications per row;
- row-wise codebooks of binary32 centers;
- log2(K)-bit indices, with K = 16 as the main configuration;
- matrices stored in LUT RAM;
- the two layer sizes;
- the 100 MHz clock, used for the timing figures.

The following are this implementation's own choices, because the source
does not describe them:

- the handling of subnormals and NaN;
- the one-weight-per-cycle schedule with non-overlapping phases;
- single-cycle combinational arithmetic;
- the memory layouts and the load and result ports;
- the reset behaviour.

The source does not describe how the memories are loaded from the host
processor, so that interface is left to the integrator.
