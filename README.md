# Multiplierless 8-point KLT approximations in a pipelined core

The Karhunen-Loève transform (KLT) decorrelates a signal optimally, but its
matrix depends on the signal's statistics and costs 64 multiplications per
8-point block. For a first-order Markov signal with correlation coefficient
ρ, the KLT matrix has a closed form. Applying integer functions (floor,
ceiling, truncation, rounding away from zero) to a scaled copy of that matrix
gives a low-complexity matrix **T** whose entries are all in {0, ±1, ±2, ±3}.
The article "Fast Data-independent KLT Approximations Based on Integer
Functions" searches this family and keeps six matrices. T1, T3 and T13 serve
weakly correlated data (ρ ≤ 0.7). T16, T17 and T18 serve strongly correlated
data (ρ > 0.7), which includes natural images. Each matrix factors into sparse
matrices that need only additions and shifts. The article then maps each
factorization onto an FPGA as a pipelined systolic core.

This repository gives SystemVerilog for those six cores. It also includes the
small serial testbed (host link, UART, AXI4 bus and controller) that the
article used to exercise them. The cores compute `y = T x`. The diagonal
scaling `S = diag(T Tᵀ)^(-1/2)`, which turns **T** into the orthonormal
approximation `K̂ = S T`, is left out, as in the article: it is meant to be
folded into the quantizer that follows the transform.

## The six matrices and their fast algorithm

All six matrices share one butterfly front end and one output permutation:

```
T1, T3, T13 :  T = P · blockdiag(M1, M2) · A1
T16, T17    :  T = P · blockdiag(M1, M2) · A2'  · A1
T18         :  T = P · blockdiag(M1, M2) · A2'' · A1
```

* **A1** forms the sums and differences of mirrored inputs:
  `u[i] = x[i] + x[7-i]` for i = 0..3, and `u[4+k] = x[3-k] - x[4+k]`
  for k = 0..3.
* **A2'** adds one more butterfly on elements 0 and 3: `v0 = u0 + u3`,
  `v3 = u0 - u3`. **A2''** does the same on elements 1 and 2.
* **M1** and **M2** are 4×4 matrices with entries m0..m15 (row-major) in
  {0, ±1, ±2, ±3}. M1 acts on elements 0..3 and M2 on elements 4..7. Their
  values for every transform are the table `klt_pkg::MTAB`. A product by 2 is
  a shift; a product by 3 is a shift plus an add.
* **P** restores natural order. M1's four rows are the even outputs y0, y2,
  y4, y6. M2's four rows are the odd outputs y1, y3, y5, y7.

The full matrices are listed in `tb/tb_klt_ref_pkg.sv` (`TMAT`). For example:

```
T1 = [ 0  1  1  1  1  1  1  0        T16 = [ 2  2  2  2  2  2  2  2
       1  1  1  0  0 -1 -1 -1                3  3  2  1 -1 -2 -3 -3
       1  1  0 -1 -1  0  1  1                3  2 -1 -3 -3 -1  2  3
       1  0 -1 -1  1  1  0 -1                3  0 -3 -2  2  3  0 -3
       1  0 -1  1  1 -1  0  1                2 -2 -2  2  2 -2 -2  2
       1 -1  0  1 -1  0  1 -1                2 -3  1  2 -2 -1  3 -2
       1 -1  1  0  0  1 -1  1                1 -3  3 -1 -1  3 -3  1
       0 -1  1 -1  1 -1  1  0 ]              1 -2  3 -3  3 -3  2 -1 ]
```

T17 differs from T16 only in row 5. T18 differs from T13 only in row 2. The
testbenches never use the factored form as their reference: they multiply
by the full matrix. This catches an error in any factor or in the
constant table.

## Pipeline, latency and wordlength

`klt_transform` builds one transform (parameter `XFORM`) from one sub-block
per factor:

```
 x (8 x IN_W) --> [A1, reg] --> ([A2' or A2'', reg]) --> [M1 | M2: 2 regs] --> P --> y
                    1 cycle          1 cycle               2 cycles           wires
```

| XFORM | A2 stage | latency (cycles) | max \|m\| | output width (IN_W = 8) | growth |
|-------|----------|------------------|-----------|-------------------------|--------|
| T1    | none     | 3                | 1         | 11                      | +3     |
| T3    | none     | 3                | 3         | 13                      | +5     |
| T13   | none     | 3                | 2         | 12                      | +4     |
| T16   | A2'      | 4                | 3         | 14                      | +6     |
| T17   | A2'      | 4                | 3         | 14                      | +6     |
| T18   | A2''     | 4                | 2         | 13                      | +5     |

The core accepts a new vector every clock cycle. A valid bit travels along
the pipeline, and `out_valid` rises exactly `LAT` cycles after `in_valid`.
There is no back-pressure. Only the valid bits are reset, synchronously and
active low. The data registers load only when their stage's valid bit is
high.

**Where the widths come from.** The article states two rules: each
arithmetic sub-block widens the data by one bit, and the M kernel takes two
clock cycles. It also gives the total growth of each core (the last column
above). The additive stages give one bit each. The rest must be the M
kernel's share: 2, 4, 3, 4, 4, 3 bits. That equals
`2 + ceil(log2(max|m|))`, where the 2 bits cover the two adder levels and the
rest covers the largest constant. `klt_pkg::out_width` encodes this rule.
With it, the RTL reproduces every published growth and latency figure. The
rule is a reading of the published numbers, not a formula the article
states.

The rule is safe but not always tight. The largest output magnitude is
`max_row Σ|T_rc| · 128`: 768 for T1, 1536 for T13 and T18, and 2304 for T3,
T16 and T17. All of these fit the widths above. T16 and T17 would fit in 13
bits, but the RTL keeps the published 14.

**Inside the M kernel.** Cycle 1 registers two partial sums per row,
`m[4r]·w0 + m[4r+1]·w1` and `m[4r+2]·w2 + m[4r+3]·w3`. Cycle 2 adds them.
The constants are parameters, so the `case` in `cmul` collapses at
elaboration to a wire, a negation, a shift, or a shift plus an add. No
multiplier is inferred. The partial-sum register is as wide as the output.
All kernel arithmetic is two's complement modulo 2^OUT_W, which is exact
because each final row sum fits in OUT_W bits. A narrower partial-sum
register would be cheaper. But a partial sum with a negated most-negative
input can exceed it, and the article gives no internal widths, so the RTL
does not use one.

## The testbed

```
 host (serial) --rxd--> axil_uart --AXI4-Lite--> klt_ctrl --x, x_valid--> 6 x klt_transform
               <-txd---  (16-byte RX/TX queues)   (FSM)    <--y, y_valid-- (selected by xform_sel)
```

The article tested each core on an FPGA in this setting. A PC sends eight
8-bit coefficients through a UART. A state machine hands them to the
transform and sends the eight results back. The PC compares them with a
software model. The UART talks to the controller over AXI4. `klt_testbed_top`
follows that outline with these choices, none of which the article
specifies:

* **All six cores in one design.** Every input vector enters all six cores.
  `xform_sel` (a `klt_pkg::xform_e`) picks whose result is returned. It is
  sampled when the vector enters, so it can change between operations.
  The article built one core per FPGA image. To get that, instantiate
  `klt_transform` alone.
* **UART core `axil_uart`.** 8N1 framing, `CLKS_PER_BIT = 868` (115200 baud
  at 100 MHz), and 16-entry receive and transmit queues. It has four
  registers, laid out like the common FPGA "UART lite" core:

  | offset | register | access |
  |--------|----------|--------|
  | 0x0 | RX | read: oldest received byte, removed by the read |
  | 0x4 | TX | write: byte to send |
  | 0x8 | STAT | read: [0] RX has data, [1] RX full, [2] TX empty, [3] TX full, [5] overrun, [6] framing error (5 and 6 clear on read) |
  | 0xC | CTRL | write: [0] flush TX, [1] flush RX |

* **AXI4-Lite.** The controller-UART bus uses the AXI4-Lite subset:
  single 32-bit accesses with no bursts or IDs. The bundle is the interface
  `axil_if`. Its assertions enforce the channel rule: VALID, once raised,
  stays high with a stable payload until READY.
* **Controller `klt_ctrl` and byte format.** The controller polls STAT and
  reads RX until it has eight bytes, x0 first. It pulses `x_valid` and waits
  for the selected core's `y_valid`. Then it writes 16 bytes to TX, polling
  STAT before each byte and holding back while TX is full. Each output
  coefficient goes out as a 16-bit two's-complement word, low byte first,
  y0 first. `vec_count` counts completed operations. `tx_stalls` counts
  polls that found the transmit queue full. One operation takes about
  24 character times on the line (8 in, 16 out). The transform's 3 or 4
  cycles are negligible in comparison.

## How far this follows the article

Taken from the article:

* the six matrices;
* the factorization `P · M · A2 · A1` and every constant of M1/M2. The
  product of the factors was checked against each full matrix; all six
  agree;
* the 8-bit input width;
* one cycle per additive stage, two cycles for M, and a purely
  combinational P;
* the published growth and latency of every core;
* the omission of the scaling matrix;
* the testbed's outline: PC, UART, AXI4, controller, eight coefficients
  each way;
* the test data range [-10, 10].

Chosen here:

* the signed two's-complement input format;
* the valid-bit pipeline and the reset of the valid bits only;
* the M kernel's internal split and register widths;
* the pass-through registers in the A2 stage;
* everything about the UART, its registers and the AXI4-Lite subset;
* the output byte format;
* the six-core selector.

The signal-flow graphs and the testbed diagram of the article were not
available. The structure therefore comes from the equations and tables
alone. The article also reports FPGA resources (slices, LUTs, flip-flops),
critical path and power for an Artix-7 device. This RTL was not
synthesised for that device, and those figures are not reproduced here.

One inconsistency in the article: its hardware section assigns the
matrices A1, A2' and A2'' to "(f1), (f2) and (f2)". Its factorization
equations put A2'' in the T18 algorithm (f3). The RTL follows the
equations.

## Files

| file | contents |
|------|----------|
| `rtl/klt_pkg.sv` | transform enum, kernel constants, width and latency rules |
| `rtl/klt_a1_stage.sv` | A1 butterfly, 1 cycle |
| `rtl/klt_a2_stage.sv` | A2' / A2'' butterfly, 1 cycle |
| `rtl/klt_m_kernel.sv` | 4×4 shift-add kernel, 2 cycles |
| `rtl/klt_transform.sv` | one complete core, `y = T x`; the permutation P is its output wiring |
| `rtl/axil_if.sv` | AXI4-Lite interface with handshake assertions |
| `rtl/axil_uart.sv`, `uart_rx.sv`, `uart_tx.sv`, `sync_fifo.sv` | UART core |
| `rtl/klt_ctrl.sv` | testbed controller |
| `rtl/klt_testbed_top.sv` | top level: UART, controller and six cores |

## Testbenches

Each testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. All of them take their reference data from
`tb/tb_klt_ref_pkg.sv`: the full matrices, the kernel constants, and the
published growth and latency figures.

| testbench | what it shows |
|-----------|---------------|
| `tb_klt_a1_stage` | A1 against its matrix; 1-cycle latency; valid bit |
| `tb_klt_a2_stage` | A2' and A2'' against their matrices; 1-cycle latency |
| `tb_klt_m_kernel` | eight kernel blocks against direct 4×4 products on a back-to-back stream; 2-cycle latency |
| `tb_klt_transform` | all six cores against `T x` on a random stream with gaps, including inputs that reach each row's largest magnitude; latency and output width against the published figures |
| `tb_axil_uart` | serial receive and transmit, queue order, full, overrun and framing flags, flush |
| `tb_klt_ctrl` | controller against a model register file with random AXI delays and split address and data acceptance, and a model transform; byte format; stall counting |
| `tb_klt_testbed_top` | the whole testbed at its default parameters. A model host sends vectors from [-10, 10] plus full-range vectors, switching between all six transforms, and overlaps each send with the previous reply, which fills the transmit queue and makes the controller stall. Every returned word is checked against `T x`. Takes about 3 s. |
| `tb_klt_image_2d` | the 2-D 8×8 block transform used for image compression, `B = T A Tᵀ`. It runs on a synthetic 64×64 8-bit image for all six transforms. The row pass uses an 8-bit-input core. The column pass uses a second core built for the row pass's output width. Each pass must finish 7 + latency cycles after its first row enters, which shows one vector per cycle. |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/klt_pkg.sv tb/tb_klt_ref_pkg.sv tb/tb_klt_testbed_top.sv \
    --top-module tb_klt_testbed_top -o sim
./obj_dir/sim
```

Replace the last file and `--top-module` to run another testbench. Pass the
two package files first, as above: the testbenches import them.

## Changing the design

* **Input width.** `IN_W` on `klt_transform` sets the input width. Every
  internal and output width follows from it through `klt_pkg::out_width`.
  `tb_klt_image_2d` uses this to build the column-pass core.
* **A new matrix.** A matrix with the same factorization needs a new
  `xform_e` value, a row in `MTAB` with its sixteen M1 and sixteen M2
  constants, and its A2 kind in `klt_pkg::a2_kind`. Constants outside
  {0, ±1, ±2, ±3} also need a case in `klt_m_kernel::cmul` and in
  `klt_pkg::m_prod_bits`.
* **Baud rate and queue depth.** `CLKS_PER_BIT` and `FIFO_DEPTH` on the top
  set these. If you change `CLKS_PER_BIT`, change `CPB` in
  `tb_klt_testbed_top` to match.
