# A 16 x 16 floating-point matrix unit for checksum-protected, undervolted MIMO detection

Lowering the supply voltage of a digital block towards the transistor threshold
cuts its power sharply, but it also lets timing errors through. The usual cures
(canary delay chains, shadow flip-flops that catch late transitions) have to be
designed into the circuit. The approach here leaves the circuit alone. A plain
matrix accelerator runs at reduced voltage. The host processor, which stays at
its nominal voltage, protects the arithmetic with *algorithm-based fault
tolerance* (ABFT): it appends checksum rows and columns to the matrices it
sends, and it checks whether the results still satisfy them. A timing error
inside the accelerator then shows up as a checksum mismatch, and the host can
re-run the work.

The application is linear massive-MIMO detection. The Gram matrix of the
channel is inverted approximately by Newton iteration, and that iteration is
arranged so that it carries its own checksum column. The accelerator contributes
only three tile operations on 16 x 16 single-precision matrices: multiply, add
and subtract. This repository holds synthesizable SystemVerilog for that
accelerator, and testbenches that play the host, including the full
checksum-protected detector for 8 users and 64 receive antennas.

The hardware has no checking logic at all. All protection lives in the host
software, and that is the point: an existing accelerator can be undervolted
as it is.

## 1. How the host uses the accelerator

### Real-valued problem with a checksum row

A base station with `Nr` antennas receives `y = H x + n` from `Nt` single-antenna
users. The complex problem is rewritten in real numbers:

    Hr = [ Re H  -Im H ]      (2Nr x 2Nt)        yr = [ Re y ]
         [ Im H   Re H ]                               [ Im y ]

The host appends to `Hr'` (the transpose) one extra row, the sum of its rows
`1'Hr'`. It then has the accelerator compute

    A = [Hr'; 1'Hr'] Hr + s2 [I; 1']      (2Nt+1) x 2Nt
    b = [Hr'; 1'Hr'] yr                    2Nt+1

where `s2` is the noise variance. If the products are right, the last row of
`A` equals the sum of the other rows, and the last element of `b` equals the
sum of the others. The host compares both within a tolerance. This is the first
check, on the preprocessing.

### Newton iteration with a checksum column

With `A` now meaning the 2Nt x 2Nt data part, the host sets

    D  = 1 ./ diag(A)
    P  = [ diag(D) , D ]          2Nt x (2Nt+1): the last column is the row sums
    E  = 2 [ I , 1 ]

and iterates, three times in the reference setup:

    P <- P(:,1:2Nt) * (E - A P)

Write `X = P(:,1:2Nt)`. If `P = [X, X1]`, then `E - A P = [2I - AX, 2*1 - AX1]`,
which is again of the form `[M, M1]`. The product `X [M, M1] = [XM, XM1]` keeps
the form too. So the last column stays the row sum of the rest. Each
iteration's new checksum column comes from the accelerator's own products, so
an error in any product upsets the relation. Because `X A` is close to the
identity, the mismatch survives the later iterations.

Finally

    x = [ P(:,1:2Nt) ; P(:,2Nt+1)' ] * b

In exact arithmetic `X` is symmetric: it starts diagonal, and each step keeps a
symmetric `X` symmetric because `A` is symmetric. Therefore `x`'s last element
`(X1)'b` equals the sum of the others, `1'Xb`. That is the second check. The
first `2Nt` elements give the detected symbols, `x(1:Nt) + j x(Nt+1:2Nt)`.

The tolerance has to sit above binary32 rounding noise. So very small errors
pass unnoticed; they are also too small to change the detected bits. The
testbenches use `|chk - sum| > 1e-3 * (sum of |elements| + 1)`.

### Tiling, and the boundary case

The accelerator only knows 16 x 16 tiles. The host cuts larger matrices into
tiles, pads partial tiles with zeros, and sums the partial products with the
accelerator's own add operation. For `Nt = 8`, `Nr = 64` (2Nt = 16, 2Nr = 128):

| step | tile operations |
|---|---|
| `A`: 2 row tiles (16 rows, then the checksum row) x 8 k-tiles, partial sums, `+ s2` | 16 MUL, 16 ADD |
| `b`: same, with `yr` in column 0 of the B tile | 16 MUL, 14 ADD |
| one Newton iteration: `A X`, `A (X1)`, `E - .` twice, `X M`, `X (M1)` | 4 MUL, 2 SUB |
| solve: data part, checksum row | 2 MUL |

That makes 82 tile operations per detection. Here `2Nt` is exactly the tile
width, so every checksum row or column needs a tile of its own, padded with
zeros, and the operation count doubles. Where the last tile has room to spare,
the checksum row or column fits into padding that is multiplied anyway, and
costs no accelerator time at all. Only the host's own checksum arithmetic
remains. The detector testbench measures this, with `Nr = 8 Nt` and three
iterations. The cycle counts are accelerator cycles, including the streaming:

| Nt | Nr | 2Nt | cycles with checksums | without | overhead |
|---|---|---|---|---|---|
| 4 | 32 | 8 | 83,325 | 83,325 | 0 % |
| 8 | 64 | 16 | 261,018 | 130,509 | 100 % |
| 12 | 96 | 24 | 714,888 | 714,888 | 0 % |
| 16 | 128 | 32 | 1,284,660 | 856,440 | 50 % |

So the cost of the protection depends almost entirely on how the matrix sizes
fall against the 16-wide tile. It is zero or nearly zero in general, and large
only when `2Nt` is a multiple of 16. The host-side time, which a real system
also pays, is not counted here.

## 2. The accelerator

```
   ap_start, op ──►┌──────────┐──► ap_idle, ap_done
  s_axis: A, B ───►│ mxu_ctrl │──► m_axis: C (tlast)
                   └──────────┘
          writes A, B │   │ start/op ▲ done   ▲ reads C
                      ▼   ▼          │        │
  ┌─────────────────┐  ┌─────────────┴──┐   ┌─────────────────┐
  │ matrix_buffer A │─►│  mxu_engine    │──►│ matrix_buffer C │
  │ matrix_buffer B │─►│ fp32_mul ->    │   └─────────────────┘
  └─────────────────┘  │ fp32_addsub    │
                       └────────────────┘
```

| module | role |
|---|---|
| `mxu_pkg` | tile size `DIM = 16`, word width 32, `mxu_op_e` (`OP_MUL = 0`, `OP_ADD = 1`, `OP_SUB = 2`) |
| `matrix_accel` | top level |
| `mxu_ctrl` | start/done handshake; loads A and B from the input stream; starts the engine; streams C out |
| `matrix_buffer` | one tile: 256 x 32 bits, one synchronous write port, one asynchronous read port |
| `mxu_engine` | the three operations, with one two-stage multiply-add datapath that accumulates in the C buffer |
| `fp32_mul`, `fp32_addsub` | combinational binary32 arithmetic |

### Protocol

1. While `ap_idle` is high, raise `ap_start` for one cycle with `op` valid.
2. Send 512 words on `s_axis_*` (valid/ready): tile A row-major, then tile B
   row-major. Element (r, c) is word `16 r + c`. Gaps in `tvalid` are allowed.
3. The engine runs; `busy` is high.
4. 256 words of C come out on `m_axis_*`, row-major, with `tlast` on the last
   word. Back-pressure on `tready` is allowed; a word offered stays unchanged
   until it is taken. An assertion in `mxu_ctrl` checks this.
5. `ap_done` pulses for one cycle and `ap_idle` is high again. A new
   `ap_start` can be given in that same cycle.

### Timing (DIM = 16)

| operation | engine cycles | last input word to first output word |
|---|---|---|
| `OP_MUL` | DIM^3 + 1 = 4097 | 4100 |
| `OP_ADD`, `OP_SUB` | DIM^2 + 1 = 257 | 260 |

Loading takes at least 512 cycles and unloading at least 256. One tile multiply
therefore takes about 4,870 cycles end to end, or 49 us at 100 MHz.

### Arithmetic

The numbers are IEEE-754 binary32, rounded to nearest with ties to even.
Subnormal inputs count as zero, and results below 2^-126 are flushed to zero.
Any NaN input, or a product 0 x inf or a sum inf - inf, gives the quiet NaN
`0x7FC00000`. There are no exception flags.

The datapath is one multiplier and one adder, with a pipeline register
between them. For a product the engine walks the tiles in the order row `i`,
inner index `k`, column `j`, with `j` innermost. Stage 1 multiplies `A[i][k]`
by `B[k][j]`. Stage 2 reads the partial sum of `C[i][j]` back from the C buffer,
adds the product and writes it back. The sum starts from +0 when `k = 0`. The
same element comes round again only 16 cycles later, so the read-modify-write
needs no forwarding. Each `C[i][j]` is therefore summed in the fixed order
`k = 0 .. 15`, with a rounding after every multiply and every add. The results are therefore fully
reproducible: a host that wants to check them bit for bit can repeat that
order. The testbenches do exactly that.

### What is the paper's and what is this design's

Taken from the published design:

* a matrix operation unit that multiplies, adds and subtracts;
* fixed 16 x 16 inputs, with zero padding and tiling done by the host;
* the two input tiles are streamed in and the result streamed out;
* floating-point arithmetic;
* no fault-tolerance hardware: ABFT is done entirely in host software;
* the workload: Nt = 8, Nr = 64, 3 Newton iterations, SNR 10, clock 100 MHz.
  The SNR is given without a unit; the testbench reads it as 10 dB per receive
  antenna and uses QPSK symbols (the modulation is not specified).

This design's own choices, because the original block was generated by a
high-level-synthesis tool and its internals are not published:

* binary32 with flush-to-zero;
* one multiply-accumulate per cycle, in two pipeline stages, accumulating in
  the C buffer;
* the summation order;
* the distributed-RAM tile buffers;
* the valid/ready stream protocol, with A sent before B;
* the start/done handshake;
* the op-code values;
* the synchronous, active-low reset.

None of these choices changes what the host sees, except the latency and the
last-bit rounding of the dot products. The bus that joins the accelerator to
the processor (interconnect, DMA engine) is not modelled; the top level
exposes the plain stream and handshake signals instead.

Deliberately left out, because they are not logic or not part of the design:

* the processor and its software, which appear only as testbench code;
* the board's voltage regulators and the power-management bus;
* the lab equipment;
* the delay-chain timing sensors that the approach replaces.

### Limits worth knowing

* Each pipeline stage still holds a whole floating-point operation. One stage
  is a buffer read and a 24 x 24 multiply with rounding; the other is a buffer
  read and an add with alignment, normalisation and rounding. Reaching 100 MHz
  on an FPGA may need deeper pipelining. With its `j`-innermost loop order, the
  engine tolerates an adder latency of up to DIM cycles without forwarding.
* `DIM` must be a power of two, because tile addresses are `{row, col}` bit
  fields. An assertion in `mxu_engine` checks this at the start of
  simulation.
* An undefined op code (3) acts as `OP_ADD`.

## 3. Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Reference values come from the testbench,
never from the design. Products and sums are computed in double precision and
rounded once to binary32, with the same flush-to-zero rule (`tb/tb_fp_pkg.sv`).
A binary32 product is exact in double precision. For a binary32 sum, double
rounding through double precision gives the same result as a single correct
rounding. So the reference is bit-exact.

| testbench | what it shows |
|---|---|
| `tb_fp32_mul` | 20,000 random products plus special cases, bit-exact |
| `tb_fp32_addsub` | 30,000 random sums and differences, including heavy cancellation and far-apart exponents, plus special cases |
| `tb_matrix_buffer` | write in random order, read back, write-enable and write timing |
| `tb_mxu_engine` | all three operations on random tiles over stale C contents, bit-exact; each C element written DIM times for MUL and once for ADD/SUB; latency DIM^3 + 1 / DIM^2 + 1 |
| `tb_mxu_ctrl` | stream ordering into A and B, one engine start per operation, output order, `tlast`, data held under back-pressure, `ap_done` |
| `tb_matrix_accel` | whole accelerator at default size: MUL, ADD, SUB; random input gaps and output stalls; back-to-back operations; latency; `busy` duration |
| `tb_mimo_newton_abft` | the host: the checksum-protected Newton detector, 3 iterations, QPSK, SNR 10 dB; Nt = 8, Nr = 64, and a sweep Nt = 4 .. 16 (see below) |

`tb_mimo_newton_abft` runs three clean detections at Nt = 8, Nr = 64. None may
raise a checksum alarm. Each result must match a double-precision model of the
same algorithm to within 1e-3, and each detection must take 82 tile operations.
It then flips the top mantissa bit of one word of the first preprocessing
product; the first check must fire. It does the same to the first product of
the second Newton iteration; the final check must fire. The flipped word stands
for a timing error in an undervolted accelerator. Next comes an error campaign of 80 detections. Each one has a single flip of
a random bit among bits 15 to 30 of one random word, in one random tile result,
and is compared with a clean run of the same problem. In a typical run, 13 are
detected, 67 leave the output unchanged, and none goes undetected while
changing the output beyond tolerance. Most flips land in zero padding or in
words the host discards. The testbench requires that no undetected flip changes
a detected bit. Finally it runs the size sweep
of the table above, with and without checksums. It checks every result against
the model, and it checks that the overhead at Nt = 12 is below the boundary
case Nt = 8. The sweep sizes are illustrations chosen here; the only size the
evaluation fixes is Nt = 8, Nr = 64. `Nr = 8 Nt` keeps the Gram matrix
diagonally dominant enough for the Newton iteration, started from the inverse
diagonal, to converge.

To run a testbench with Verilator 5, from the folder that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/mxu_pkg.sv tb/tb_fp_pkg.sv tb/tb_matrix_accel.sv \
    --top-module tb_matrix_accel -o sim
./obj_dir/sim
```

Replace `tb_matrix_accel` with any other testbench name. Verilator finds the
other modules through `-y`, but the two packages must be named first. Each
testbench builds in under a minute and runs in a second or less.

## 4. Changing it

* **Tile size.** Set `DIM` in `mxu_pkg`, or override it on `matrix_accel`. It
  must be a power of two. Buffers and counters scale with it. A multiply takes
  DIM^3 + 1 cycles.
* **Number format.** Replace `fp32_mul` and `fp32_addsub`. The engine only
  relies on their ports and on a combinational result within each stage.
* **Throughput.** Replace the engine's single datapath with DIM parallel
  datapaths, one per column of C. This cuts a multiply to DIM^2 cycles; the
  buffers would need one wide read port for B.
