# A Posit(32,2) systolic GEMM accelerator

This RTL implements a matrix-multiply engine that works in 32-bit posit
arithmetic, Posit(32,2), instead of IEEE binary32. It computes the
BLAS GEMM update

    C = alpha * A * B + beta * C        (no transposes)

on a 16 x 16 systolic array of processing elements (PEs). Each PE does one
posit multiply followed by one posit add. The accelerator is meant to sit
next to a host that runs blocked LU or Cholesky factorisation. The host
keeps the panel work and hands the large trailing-matrix updates, which are
GEMMs, to the array.

The point of doing this in hardware is that posits are hard to decode in
software. A software decoder loops over the regime bits, so its speed
depends on the magnitude of the operands. In hardware, decoding and encoding
are fixed-depth logic. The array therefore runs at the same rate whatever the
operand magnitudes are: one row of 16 multiply-adds per PE row per cycle,
256 multiply-adds per cycle in all.

The architecture follows a published evaluation of posit accelerators on an
Intel Agilex FPGA. That work gives the array size (16 x 16), the
multiply-then-add PE, the 11-cycle PE latency, the two's-complement internal
format and the GEMM interface. Everything that work does not describe is this
design's own choice. That includes the data flow, the controller, the buffers,
the rounding details and the pipeline split. Each choice is marked as such
below and in the opening comment of each file.

## 1. The number format

A Posit(32,2) word is, from the MSB down:

| field    | width               | meaning                                         |
|----------|---------------------|-------------------------------------------------|
| s        | 1                   | sign                                            |
| regime r | variable, 2..31     | a run of equal bits ended by the opposite bit   |
| e        | 2 (fewer if cut off)| exponent                                        |
| f        | the rest, 0..27     | fraction, with an implicit leading 1            |

A run of m ones gives k = m-1. A run of m zeros gives k = -m. The value is

    x = (-1)^s * 16^k * 2^e * 1.f          (16 = 2^(2^es), es = 2)

so the scale of the number is 4k + e. A negative number is the two's
complement of the whole word of its absolute value. Two words are special:
0x00000000 is zero and 0x80000000 is NaR ("not a real"). The largest value,
maxpos = 0x7FFFFFFF, is 2^120. The smallest, minpos = 0x00000001, is 2^-120.
A number close to 1 has a 2-bit regime and 27 fraction bits. That is more
than binary32 has, so Posit(32,2) is more accurate than binary32 between
about 10^-3 and 10^3. Far from 1 the fraction shrinks to a few bits or none.

Some words to check a decoder against: 1.0 = 0x40000000, 2.0 = 0x48000000,
0.5 = 0x38000000, -1.0 = 0xC0000000.

## 2. Arithmetic units

### Internal format

Both units decode their operands into the same record (`posit_int_t` in
`posit_pkg`). It holds NaR and zero flags, a 12-bit signed scale 4k+e, and a
**29-bit two's-complement significand**: ±1.f with 27 fraction bits, so that
value = sig * 2^(scale-27). The significand keeps its sign, unlike a
sign-and-magnitude format, for two reasons:

* the multiplier needs no sign logic, because the sign of the signed product
  is the sign of the result;
* the adder needs no magnitude compare and no separate subtract path. It
  aligns on the scale alone and adds two signed numbers.

The source evaluation found this variant smaller than a sign-and-magnitude
one. Here the decoder still makes the word positive first, to find the
regime with a single priority encoder. It then negates the 1.f significand
again for negative inputs.

### posit_decode (combinational)

1. Take mag = |word|, as a two's complement.
2. A priority encoder over bits 30..0 finds the first bit that differs from
   bit 30. This gives the run length m (31 if no bit differs), and from it k.
3. Shift left by m+1 to drop the regime and its terminator. The next two bits
   are e and the 27 bits below them are the fraction. Bits past the end of
   the word read as zero.
4. scale = {k, e} (that is, 4k+e), sig = ±{1, f}.

### posit_mul (5 cycles)

| cycle | work                                                                  |
|-------|-----------------------------------------------------------------------|
| 1     | decode both operands, register                                        |
| 2     | two partial products: a * b[13:0] (unsigned) and a * b[28:14] (signed) |
| 3     | add them into the exact 58-bit signed product; scale = sa + sb        |
| 4-5   | posit_encode, with value = prod * 2^(scale-54) and no sticky bit       |

### posit_add (6 cycles)

| cycle | work                                                                 |
|-------|----------------------------------------------------------------------|
| 1     | decode both operands, register                                       |
| 2     | reference operand = the larger scale; distance = difference, capped at 63 |
| 3     | widen both significands by 32 guard bits; arithmetic right shift of the other one; OR the lost bits into a sticky bit |
| 4     | one signed 62-bit add                                                |
| 5-6   | posit_encode, with value = sum * 2^(scale-59) plus the sticky bit      |

A zero operand has its significand forced to 0, so the other operand passes
through unchanged. NaR in either operand gives NaR.

With two's complement, the shifted-out bits always mean "the true value lies
a little *above* the truncated one", because an arithmetic shift is a floor.
That stays true for negative numbers. When the encoder takes the magnitude
of a negative sum it uses `~sum` instead of `-sum` if the sticky bit is set:
-(s + d) = ~s + (1 - d) with 0 < 1-d < 1. So the magnitude keeps the
same "a little above" meaning and rounding needs no sign cases.

### posit_encode (2 cycles): where the rounding happens

* **Stage A.** Convert to magnitude as above. Find the leading one with a
  priority encoder. Compute the binary exponent E = scale + lead - FP, and
  left-justify the bits below the leading one.
* **Stage B.**
  * If E >= 120, the result is maxpos. If E < -120, it is minpos. A posit
    never rounds to zero and never overflows to NaR.
  * Otherwise split E into k = floor(E/4) and e = E mod 4. Write a 128-bit
    string: the regime (k+1 ones and a 0, or -k zeros and a 1), then e, then
    all fraction bits.
  * Keep the first 31 bits. The next bit is the guard bit, and the OR of the
    rest, and of the incoming sticky bit, is the sticky bit. Round to nearest,
    ties to even, on this bit string.
  * Negate the word if the result is negative.

Rounding on the bit string, rather than on the value, is the posit rule. When
the regime grows so long that exponent bits fall off the end, the rounding
point lies between two exponent values rather than inside a fraction. A
carry out of the kept bits is correct as it stands: it moves into the
regime or exponent and gives the next posit up.

The encoder has one precondition. The sticky bit may be set only when the
magnitude has at least 29 significant bits above its LSB. This keeps the
rounding point above the lost bits. The adder always meets it, since a
sticky bit only arises after an alignment shift, when the sum still has 58
or more bits.

## 3. The processing element and the array

### Data flow

The array is **B-stationary**. PE(k, j) holds B[k][j] of the current 16 x 16
block of B.

* In each cycle one row i of the current 16-column block of A enters: A[i][k]
  goes in at the left of row k. With it come the 16 running sums of row i of
  C, one at the top of each column.
* A element moves right one PE per cycle.
* A partial sum moves down its column. In each PE it becomes
  sum + A[i][k] * B[k][j].

Inside a PE the partial sum waits 5 cycles in a delay line while the
multiplier works. Then it enters the adder together with the product. A
partial sum therefore needs 11 cycles per PE, and 16 x 11 = 176 cycles to
cross a column. This is the figure that makes a 16 x 16 array poorly used on
thin matrices (section 5).

### Skew

For A[i][k] to meet its partial sum in PE(k, j):

* row k's input is delayed 11*k cycles;
* column j's partial-sum input is delayed j cycles;
* column j's output is delayed 15-j cycles.

After this, one whole row of results leaves in the same cycle. The array
latency is 16*11 + 15 = **191 cycles**, and it accepts a new row every cycle.
A valid bit travels with every operand and every sum. An assertion in each
PE checks that the operand and its partial sum arrive together.

### Weights

Weights go in through a shift chain down each column. For 16 cycles the
controller pushes rows 15, 14, ..., 0 of the B block, and `w_shift` moves
every column down by one. Weights are changed only when the array is empty.

## 4. The accelerator (`posit_gemm`)

### Buffers

There are four on-chip buffers: A (M x K), B (K x N), C (M x N) and ACC
(M x N, for partial sums). Each is split into 16 banks by column index mod
16, so that a 16-wide slice of one row can be read or written in one cycle.
Each bank is a 1-write, 1-read block RAM with a registered read
(`bank_ram`). At the default MAX_M = MAX_N = MAX_K = 256, every bank holds
4096 words and the four buffers hold 8.4 Mbit.

### Host port protocol

While `busy` is low, the host:

1. writes words with `host_wr_en`, `host_wr_sel` (BUF_A, BUF_B or BUF_C),
   `host_wr_row`, `host_wr_col` and `host_wr_data`, one per cycle;
2. sets `cfg_m`, `cfg_n`, `cfg_k`, `alpha` and `beta`, and pulses `start`;
3. waits for `done`, which is a one-cycle pulse;
4. reads C with `host_rd_en`, `host_rd_row` and `host_rd_col`. The data
   arrives one cycle later, with `host_rd_valid`.

N and K must be multiples of 16. M can be any value from 1 to 256.
Assertions check these limits, and that the host port is not used while the
accelerator is busy.

### Controller

The loops run over column blocks nb of C (outer) and K blocks kb (inner).
Each (nb, kb) pair is one **pass**:

| phase  | cycles | what happens                                                          |
|--------|--------|-----------------------------------------------------------------------|
| LOAD   | 16     | B rows kb*16+15 .. kb*16 of column block nb are read and shifted into the PEs |
| STREAM | M      | row i of A (block kb) and row i of ACC (zero when kb = 0) are read and sent into the array |
| DRAIN  | 193 or 205 | wait until every row has come out and been written back       |

In DRAIN, rows that leave the array go back to ACC while more K blocks
follow. After the last K block they go through `gemm_scale` instead. That
unit reads the original C row, computes round(alpha*acc) + round(beta*c) in
11 cycles, and writes the result into C.

A counter of outstanding rows tells the controller when the array is empty.
A job therefore takes exactly

    cycles = (N/16)(K/16)(16 + M + 193) + (N/16)*12 + 1

from the `start` cycle to `done`. The end-to-end test checks this formula.

### Order of rounding

Every C element is built as

    acc = 0
    for k = 0 .. K-1:  acc = round(round(A[i][k]*B[k][j]) + acc)
    C[i][j] = round(round(alpha*acc) + round(beta*C[i][j]))

This is a plain sequential dot product in k order, with each product and
each sum rounded to Posit(32,2) (no fused accumulation). The result is
therefore the same, bit for bit, as a scalar software loop that rounds in
the same order.

## 5. Throughput and utilisation

At full occupancy the array does 256 multiply-adds per cycle. That is
2 x 256 x f flop/s, or about 220 Gflop/s at the 430 MHz the source reports
for its FPGA build. A pass keeps the array busy for only M of its
16 + M + 193 cycles, because weights are not double-buffered. Two kinds of
job suffer most:

* jobs with short M, since the 191-cycle latency is paid on every pass;
* thin trailing updates with small K, since there are few passes per
  column block over which to spread the fixed cost.

For a 256 x 256 tile with K = 32, the formula gives 15,073 cycles for
2.1 M multiply-adds. The ideal would be 8,192 cycles, so the array runs at
54% of peak. With M = 32 instead, the same K gives only 13%. The source
measured 20% of peak at K = 32 for its whole system, which streams from DDR
memory, so the two figures are not directly comparable. The source improved
its result with a smaller 8 x 8 array. Overlapping the next weight load with
the current drain would be the obvious next step. It is not done here.

## 6. Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

The reference model is `tb/posit_ref_pkg.sv`. It works the way a software
library does: it expands a posit bit by bit into an exact integer times a
power of two, forms products and sums exactly in 512-bit integers, and
rounds by walking the result's bit string one bit at a time. It shares no
code or structure with the RTL.

| testbench           | what it checks                                                      |
|---------------------|---------------------------------------------------------------------|
| tb_posit_decode     | corner words and 5000 random words, against the exact expansion     |
| tb_posit_encode     | 6000 random significands, scales ±160 and sticky bits; ties, saturation, 2-cycle latency |
| tb_posit_mul        | 11100 operand pairs (corners, near 1, all sizes, random words), bit-exact; latency 5 |
| tb_posit_add        | the same for the adder; latency 6                                   |
| tb_posit_pe         | psum_out = round(round(a*w) + psum) after 11 cycles, a_out after 1, weight changes |
| tb_systolic_array   | two 24-row blocks through the full 16 x 16 array, every element, latency 191 |
| tb_gemm_scale       | 400 rows under four alpha/beta settings; latency 11                 |
| tb_bank_ram         | random read/write traffic, read-before-write, output hold           |
| tb_posit_gemm       | three full jobs at default parameters: 20x32x48 with three K blocks fed back through ACC and random alpha/beta, 5x16x16 with alpha = 1 and beta = 0, and 16x16x32 over a wide magnitude range; all of C compared, job cycle count and `busy` checked, using only the ports |

To run one with plain Verilator, list the packages first:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/posit_pkg.sv tb/posit_ref_pkg.sv rtl/*.sv tb/tb_posit_gemm.sv \
        --top-module tb_posit_gemm -j 8
    ./obj_dir/Vtb_posit_gemm

The full-size end-to-end test builds in under a minute and runs in seconds.
The tests also pass with random initial state
(`+verilator+rand+reset+2`), because every flop that is read is reset or
written first.

## 7. Departures from the source and open points

* **Arithmetic cores.** The source took its add and multiply cores from an
  open-source posit generator and retimed them. Those cores are not
  reproduced here. The units are written directly from the posit definition,
  with round to nearest, ties to even, and saturation as in the posit
  standard. The 5 + 6 split of the 11 PE cycles is an assumption.
* **Data flow.** The source's array comes from an FPGA BLAS library whose
  internals it does not describe. The B-stationary flow with partial sums
  moving down the columns is this design's. It was chosen because it gives
  the stated 176 cycles along a column.
* **Memory system.** On the source's board, matrices live in DDR4 memory
  behind a PCIe Gen3 x16 link and a vendor OpenCL shell. None of that is
  here. The on-chip buffers and the word-wide host port stand in for it.
  As a result, the largest job is 256 x 256 x 256. Larger matrices must be
  tiled by the host.
* **Scaling.** Where alpha and beta are applied is not described in the
  source. Here they are applied once per element, after the last K block.
* **Shape limits.** N and K must be multiples of 16. No padding is done.
* **Weight loading** is not overlapped with computation (section 5).
* Only the two's-complement variant is built. The sign-and-magnitude
  variant and the binary32 arrays appear in the source only as comparisons.

## 8. Files

`rtl/`:

* `posit_pkg.sv`: types and constants
* `posit_decode.sv`, `posit_encode.sv`, `posit_mul.sv`, `posit_add.sv`:
  the arithmetic
* `posit_pe.sv`, `systolic_array.sv`: the PE and the array
* `delay_line.sv`, `valid_delay.sv`: skew and alignment delays
* `gemm_scale.sv`: the alpha/beta unit
* `bank_ram.sv`: one buffer bank
* `posit_gemm.sv`: the top

`tb/`: the reference model `posit_ref_pkg.sv` and one testbench per block.
