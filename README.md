# Strassen-squared matrix multiplication kernel

This is SystemVerilog RTL for an FPGA matrix-multiplication kernel built on
two levels of Strassen's algorithm. It follows the architecture described in
"Fast and Practical Strassen's Matrix Multiplication using FPGAs" (Ahmad, Du,
Zhang). This is an independent implementation: it was written from the
paper's text and figures, not from the authors' sources.

The standard block algorithm needs 64 submatrix products to multiply two 4x4
block matrices. Strassen's algorithm, applied once inside another application
of itself, needs only 7 x 7 = 49. The price is extra additions. Each product
now multiplies *sums* of up to four submatrices of A and of B. Each product
must also be added into, or subtracted from, up to four output submatrices.
Done against external memory, that extra traffic would cancel the gain. The
kernel avoids it:

* the whole 4x4 block of A and of B (16 submatrices each) is loaded once, with
  long bursts, into on-chip buffers;
* the operand sums of every product are formed on chip from those buffers;
* every product is added, as it streams out of the multiplier, into all the
  output submatrices that need it. These sit in an on-chip 4x4 output buffer,
  so no product is ever stored.

The multiplier itself is an ordinary GeMM micro-kernel: a 16x16 systolic array
with transpose/reuse and double-buffer stages in front of it. It is called 49
times per block multiplication instead of 64. Since that micro-kernel is the
bottleneck, the run time drops by up to 64/49.

Default configuration: 16x16 systolic array, 16 elements per memory word,
64x64 submatrices (so 256x256 blocks), 16-bit integer data.

## The two-level algorithm

The one-level algorithm, on 2x2 blocks:

```
m0 = (A00+A11)(B00+B11)   m1 = (A10+A11)B00   m2 = A00(B01-B11)   m3 = A11(B10-B00)
m4 = (A00+A01)B11         m5 = (A10-A00)(B00+B01)                 m6 = (A01-A11)(B10+B11)
C00 = m0+m3-m4+m6   C01 = m2+m4   C10 = m1+m3   C11 = m0-m1+m2+m5
```

A 4x4 block matrix is read as a 2x2 matrix (outer) of 2x2 matrices (inner).
Block `X[r][c]` has outer index `(r/2, c/2)` and inner index `(r%2, c%2)`.
Product `t = 7*p + q` (t = 0..48) combines outer product `p` with inner
product `q`. Each coefficient is the product of an outer and an inner
one-level coefficient, for the left operand, the right operand and the
outputs alike:

```
lhs_coef(t, A[r][c]) = L1_lhs(p, outer(r,c)) * L1_lhs(q, inner(r,c))
rhs_coef(t, B[r][c]) = L1_rhs(p, outer(r,c)) * L1_rhs(q, inner(r,c))
out_coef(t, C[r][c]) = L1_out(p, outer(r,c)) * L1_out(q, inner(r,c))
```

For example, `t = 0` is `(A00+A11+A22+A33)(B00+B11+B22+B33)`. It is added
into C00, C11, C22 and C33. Each one-level operand has one or two terms. Each two-level
operand therefore has 4, 2 or 1 terms:

| terms per operand | left operands (A) | right operands (B) |
|-------------------|-------------------|--------------------|
| 4                 | 25                | 25                 |
| 2                 | 20                | 20                 |
| 1                 | 4                 | 4                  |

Every output block receives 4, 8 or 16 products.

`rtl/strassen_pkg.sv` holds the three one-level tables and computes the
two-level coefficients as functions of `(t, block)`. In hardware these
functions become small ROMs indexed by the product counter. The paper's
figure numbers the 49 products in a different order and prints only a few of
them. The numbering here is the plain `7p + q`. Only correctness matters, and
`tb_strassen_pkg` checks it by comparing the 49-product result with a direct
product.

## Dataflow

```
 A port -> read_buffer(A) -> operand_transform(LHS) -> FIFO --\
                                                               gemm_microkernel -> strassen_c_buffer -> C port
 B port -> read_buffer(B) -> operand_transform(RHS) -> FIFO --/   (transpose_reuse,
                                                                   double_buffer,
                     outer_loop_ctrl, cycle_counter                 l1_gemm)
```

For each block multiplication, `outer_loop_ctrl` runs three steps, one after
the other:

1. **Load.** Each `read_buffer` fetches its 4x4 block as 4*64 = 256 bursts,
   one per block row, each 4*64 elements (16 words) long. The words land in 16
   banks, one per submatrix. A word of a submatrix has the same offset in every
   bank, so one read returns the same word of all 16 submatrices.
2. **Compute.** The two `operand_transform` units work in parallel, one on A
   and one on B. They walk the products t = 0..48 and, for each, the 256 word
   offsets of a submatrix. For each offset they add up the 1, 2 or 4 selected
   bank words with their signs. Three `operand_sum` instances do this, with
   4, 2 and 1 inputs. One operand word leaves per cycle into a FIFO. When the
   FIFO is almost full, issue stops; the FIFO raises almost-full with two
   entries still free, which covers the one read still in flight.
   The micro-kernel takes one operand pair per product from the FIFOs and
   streams out the product. `strassen_c_buffer` adds each product word into
   all 16 output banks in the same cycle, with coefficient +1, -1 or 0. The
   products of all k-blocks accumulate in the same buffer.
3. **Write-back**, after the last k-block of a C block. The 4x4 output block
   leaves as 256 bursts of 16 words. Each word read out is cleared, which
   readies the buffer for the next C block.

The loops, from outermost to innermost, run over the C block rows, the C
block columns and the k-blocks.

### Inside the micro-kernel

`l1_gemm` is a systolic array that receives one step `p` per cycle: column `p`
of the LHS for 16 output rows and row `p` of the RHS for 16 output columns. It
first sends them through a triangular shift register: lane i is delayed by i
cycles. Row-major window shift registers follow. The A lanes move right along
the array rows and the B lanes move down the columns. PE(i,j) thus sees
`a[i][p]` and `b[p][j]` together, `i + j + 1` cycles after they entered. A
delay line carries `valid/first/last` along with the data. At `first` a PE
restarts its sum. At `last` it copies the finished sum into a result
register, so the next tile can start without a gap. Once PE(15,15) has
finished, all 256 results are copied into an output bank. They leave as 16
words, one row per cycle. A tile takes K = 64 cycles, and the first result
row appears 2*SA+1 = 33 cycles after the tile's last input. K must exceed
2*(SA-1).

The systolic array needs LHS columns but receives LHS rows.
`transpose_reuse` stores the 64x64 LHS in 16 banks by row mod 16, so the 16
elements of one column tile are read in one cycle. It streams each row tile
4 times, once per output column tile. `double_buffer` stores the RHS and
streams it 4 times, once per output row tile, in the same (row tile, column
tile, step) order. Both have two halves. The operands of product t+1 are
written into one half while product t is read from the other.

One product takes (64/16)*(64/16)*64 = 1024 cycles at full rate. A 256x256
block multiplication thus needs 49 x 1024 = 50,176 cycles of array time, plus
loading and draining.

## Performance in simulation

The full-size testbench takes 62,116 cycles for a 256x256x256 multiplication,
with memory that stalls about one cycle in four. At the paper's 275 MHz clock
that is 2*256^3 / (62,116 / 275 MHz) = 149 GOPS. The rest of the 62,116 cycles
beyond the array time comes from the load and write-back steps, which do not
overlap with computing here. An ideal 16x16 array running the standard
algorithm at 275 MHz reaches 141 GOPS, so the 49/64 reduction shows directly.
A 512x512x512 multiplication (eight block multiplications, four write-backs)
takes 473,492 cycles, which is 156 GOPS at 275 MHz: each write-back
now serves two k-blocks of micro-kernel work. These are simulated cycle counts,
not hardware measurements.

## Numbers and data types

All arithmetic wraps at `DATA_W` bits: operand sums, products, accumulation
and the output buffer. The kernel therefore computes C = A*B modulo
2^DATA_W. The result is exact for any operands whose true result fits in
DATA_W signed bits. This matches integer arithmetic on `int8_t`, `int16_t`
or `int32_t`. `DATA_W = 16` is the default. The paper builds 8-, 16- and
32-bit variants. The other widths only need `DATA_W` changed. The 8- and
32-bit variants have been simulated only at reduced size (`tb_strassen2_widths`).

## Interfaces

`strassen2_top` takes a `start` pulse with `dim_m, dim_k, dim_n` and the word
base addresses of A, B and C. `done` pulses at the end, and `cycles` then
holds the run time. Dimensions must be multiples of 256 (4 x submatrix size).
Matrices are row-major, with SA elements per memory word.

Each matrix has its own memory port:

* **Read ports (A, B).** A request carries `valid/ready`, a word address and
  a length in words. Responses come back in order, at most one word per cycle,
  with `valid` and no back-pressure.
* **Write port (C).** A request (`valid/ready`, address, length) is followed by
  its data words (`valid/ready`).

These ports are simple burst interfaces standing in for the AXI ports of an
FPGA shell. Bridging them to AXI is left to the integrator.

## Where this RTL departs from the paper, and what it adds

* **Overlap.** The paper runs all steps as concurrent dataflow tasks. Here
  loading, computing and write-back of a block run in sequence; only the
  operand computation, the micro-kernel and the accumulation overlap.
  Overlapping the load of the next block would need a second pair of block
  buffers, which the paper does not describe.
* **Micro-kernel.** The paper reuses a vendor micro-kernel (Vitis BLAS). The
  micro-kernel here is an own implementation of the same chain: transpose,
  double buffer, and a systolic array with a triangular SRL and window shift
  registers. Its internals, such as banking, flag delay line and output
  drain, are this design's choices.
* **Unspecified details.** The paper gives no FIFO depths, memory word width,
  handshakes, reset behaviour, overflow rules, product order or
  output-buffer clearing. The choices made here are the ones described above.
  The output buffer is cleared during write-back and once after reset.
* **Product stream.** The paper passes the micro-kernel's results to the
  output buffer through a FIFO. Here the C buffer accepts one result word per
  cycle without back-pressure, so the micro-kernel feeds it directly and no
  FIFO is needed.
* **Product numbering.** The 49 products are numbered `7p + q`, not in the
  paper's order. The set of products and their coefficients is the same, and
  only the order of the micro-kernel calls changes.
* **Interfaces.** The paper's kernel keeps the vendor kernel's memory
  interfaces and host program. Here the ports are the burst ports described
  above.
* **Host and memory.** The host program and the HBM/DDR memory are outside
  the RTL. The testbenches use a behavioural memory model
  (`tb/ext_mem_model.sv`).

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M`. It compares against
values it computes itself, and has a watchdog. To build and run one with
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/strassen_pkg.sv tb/tb_strassen2_top.sv \
          --top-module tb_strassen2_top -o sim && ./obj_dir/sim
```

| testbench | what it runs |
|-----------|--------------|
| `tb_strassen2_top` | whole kernel at SA=4 with 8x8 submatrices: 64x64x64 and 32x64x64 against a direct product. Checks that 4/2/1-term operands, k-accumulation, several write-backs, FIFO back-pressure, ping-pong stalls and memory stalls all occur, and checks the cycle count. |
| `tb_strassen2_full` | whole kernel at default parameters: 256x256x256 and 512x512x512 (536k cycles in all, under two seconds of Verilator time). |
| `tb_strassen2_widths` | whole kernel with `DATA_W` = 8 and 32 at reduced size: 64x64x64 each, all elements checked. It runs through `tb/strassen2_width_run.sv`. |
| `tb_strassen_pkg` | the 49-product table against a direct 4x4 product, and the operand counts |
| `tb_read_buffer`, `tb_operand_transform`, `tb_operand_sum`, `tb_sync_fifo` | load path and operand sums |
| `tb_transpose_reuse`, `tb_double_buffer`, `tb_l1_gemm`, `tb_gemm_microkernel` | micro-kernel stages; checks full rate and latency |
| `tb_strassen_c_buffer`, `tb_outer_loop_ctrl`, `tb_cycle_counter` | accumulation/write-back, loop order and addresses, cycle counter |

## Changing the parameters

`SA` must divide the submatrix sizes `MP, KP, NP`. `KP` must be larger than
`2*(SA-1)`. The block is always 4x4 submatrices. On-chip storage is
16 x (MP x KP + KP x NP + MP x NP) x DATA_W bits for the three block buffers.
The transpose buffer adds 2 x MP x KP x DATA_W bits and the double buffer
2 x KP x NP x DATA_W bits. At the defaults this is about 3.4 Mbit (3,407,872 bits), plus the small FIFOs.
