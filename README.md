# Scaled 16-point DCT-II approximation from two 8-point multiplierless cores

Video and image codecs need DCT-II transforms of 16 and 32 points, but the good
multiplierless DCT approximations found by search exist mostly for 8 points. This design
builds a 16-point approximation from two copies of any 8-point approximation `T_8`. It
follows an exact recursion of the DCT-II due to Hou:

```
C_2N = (sqrt2/2) * P_2N * diag(I_N, B_N) * diag(C_N, C_N) * diag(I_N, G_N) * [I_N  Ibar_N ; Ibar_N  -I_N]
```

Here `Ibar_N` is the counter-identity (the identity with its rows reversed) and
`J_N = diag(1,-1,1,-1,...)`. The two awkward factors are:

- `B_N = -Ibar_N * tril(U_N) * J_N`, a dense triangular matrix of ±1 with one ±√2/2 column;
- `G_N = diag(2(-1)^n cos((2n+1)π/4N))`, a diagonal of irrational numbers.

Each of them is replaced by a cheap *parameter matrix*, `B_hat` or `G_hat`. This
gives a 16-point integer transform

```
T_16 = P_16 * diag(I_8, B_hat) * diag(T_8, T_8) * diag(I_8, G_hat) * butterfly_16
```

The choices are restricted so that the parameter matrices cost no multiplier: every
entry is 0, ±1/2, ±1 or ±2, and each matrix is a generalised permutation. The table below
shows the resulting family. The earlier Jridi–Alfalou–Meher (JAM) scaling is the member
with both parameter matrices equal to the identity.

| Method | `B_hat`           | `G_hat` |
|--------|-------------------|---------|
| JAM    | `I`               | `I`     |
| I      | `Ibar`            | `I`     |
| II     | `-Ibar·J`         | `I`     |
| III    | `-Ibar·Z·J`       | `I`     |
| IV     | `I`               | `J`     |
| V      | `Ibar`            | `J`     |
| VI     | `-Ibar·J`         | `J`     |
| VII    | `-Ibar·Z·J`       | `J`     |

`Z = diag(1/2, 1, ..., 1)`. Methods VI and VII track the exact `-Ibar·tril(U)·J` and
`diag(±2cos)` most closely. They give a 16-point transform with about half the
Frobenius error of JAM.

If `T_8 * T_8^T` is diagonal, `G_hat * G_hat^T` is a multiple of `I`, and `B_hat` is a
generalised permutation, then `T_16 * T_16^T` is diagonal. All eight methods meet these
conditions. So once each row of `T_16` is normalised by a diagonal `Sigma_16`, the
result is orthogonal. `Sigma_16` is not part of the hardware; as usual for such
approximations it is folded into the quantiser that follows the transform.

## Dataflow and timing of `scaled_dct_2n`

```
            cycle 1                 cycles 2-3                 cycle 4
x[0..15] ─► butterfly_2n ─u[0..7]──────────► reg ─► tn_core (upper) ─a[k]──────────────► y[2k]   ─► reg ─► y[0..15]
  8 bit      (16 adders)  v[0..7] ─► g_hat ─► reg ─► tn_core (lower) ─b[k]─► b_hat ─c[k]─► y[2k+1]
                          9 bit     (±1)              9→13 bit                (perm, ±, >>1)
```

- **Butterfly** (`butterfly_2n`): `u[n] = x[n] + x[15-n]` and `v[n] = x[7-n] - x[8+n]`.
  The upper half carries the part of the block that is even about its centre and feeds
  the even coefficients. The lower half carries the odd part.
- **`G_hat`** (`g_hat`): either nothing, or a sign change on odd `v[n]` (`J`).
- **Two cores** (`tn_core`), working in lock step on `u` and on `G_hat·v`.
- **`B_hat`** (`b_hat`): reverses the lower core's outputs, with the signs of `-Ibar·J`
  where the method needs them. For `Z` (Methods III and VII), the output that takes
  `b[0]` is halved. The halving is an arithmetic right shift, which rounds toward minus
  infinity, and the sign change comes after it.
- **Perfect shuffle** `P_16`: `y[2k] = a[k]` and `y[2k+1] = c[k]`. The outputs leave in
  natural coefficient order.

Registers sit after the butterfly and `G_hat`, inside each core (two stages), and after
`B_hat` and the shuffle. The latency is 4 cycles, and a new 16-sample block can enter
every cycle. `in_valid` travels down the pipe with the data; there is no back-pressure.
`B_hat` and `G_hat` are pure wiring and sign logic, so they sit in the same cycles as
the adders next to them.

Word lengths: 8-bit two's-complement input, 9 bits after the butterfly, and 13 bits at
the output. The 13 bits are 4 bits of core growth: one for the core's internal butterfly
and three for a sum of four terms of magnitude at most 2. With the default core,
|X| ≤ 2048, so nothing overflows. One case can still overflow: a core matrix with a row
made only of ±2 entries could reach -4096, and `B_hat` would overflow when it negates
that.

## The 8-point core

`tn_core` computes `y = M·x` for an 8×8 integer matrix `M`, which is the parameter
`MATRIX`. The matrix must have the DCT-II symmetry: even rows symmetric, odd rows
antisymmetric, entries in {0, ±1, ±2}. The core checks this when it elaborates.

1. It forms `s[n] = x[n] + x[7-n]` and `d[n] = x[n] - x[7-n]` and registers them.
2. Each odd row is a four-term sum over `d`.
3. If the even rows split once more, as they do in the exact DCT, they share a second
   butterfly, `e[n] = s[n] + s[3-n]` and `f[n] = s[n] - s[3-n]`. Rows 0 and 4 are then
   two-term sums over `e`, and rows 2 and 6 two-term sums over `f`. Splitting once more
   means rows 0 and 4 are symmetric on `s`, and rows 2 and 6 antisymmetric.
4. Otherwise each even row is a four-term sum over `s`.
5. The sums are registered.

A coefficient of 2 becomes a shift, a negative coefficient a subtraction, and a zero
costs nothing. For the rounded DCT this gives 8 + 4 + 2 + 8 = 22 additions, the same
as its known fast algorithm. The 16-point transform then needs 2·22 + 16 = 60
additions. Apart from the halving in Methods III and VII, it needs no shifts, because
`B_hat` and `G_hat` only permute entries and change signs.

The published FPGA build used the angle-based DCT approximation (ABDCT) with its own
fast algorithm. Its coefficients are not reproduced here. The default `MATRIX` is the
rounded DCT, `round(2·C_8)`, which is one of the 8-point approximations the method
family was evaluated with. `dct_scaling_pkg` also provides the signed DCT,
`sign(C_8)`. To use another approximation, for example the ABDCT, pass its matrix as
`TN_MATRIX` to `scaled_dct_2n`. Matrices with ±1/2 entries are not supported.

## Test setup around the transform

On the board, a host computer sends blocks of 16 samples through a UART, and a
controller state machine feeds them to the transform and returns the results.
`dct_testbed_top` contains this controller (`testbed_ctrl`) and the transform. The
UART core itself is an off-the-shelf peripheral, so it is left outside: the top brings
out the controller's AXI4-Lite master port.

The controller assumes the common "UART Lite" register map, with the following
defaults. All of them are parameters of `testbed_ctrl`.

| Offset | Register                                              |
|--------|-------------------------------------------------------|
| 0x0    | receive FIFO                                          |
| 0x4    | transmit FIFO                                         |
| 0x8    | status: bit 0 = receive data valid, bit 3 = transmit FIFO full |

The controller goes through these steps for each block:

1. It polls the status register until a byte has arrived, then reads the byte. After 16
   bytes it has one block; each byte is one signed 8-bit sample, `x[0]` first.
2. It raises `in_valid` to the transform for one cycle and waits for `out_valid`.
3. It sends each of the 16 coefficients as a 16-bit two's-complement word, low byte
   first, 32 bytes in all. Before each byte it polls until the transmit FIFO is not
   full.

One AXI transaction is outstanding at a time. A slow UART only stretches the exchange.
Any SLVERR or DECERR response sets the sticky output `resp_error`, and `block_count`
counts the blocks that have been returned.

## What follows the published design and what does not

Taken from the method's description:

- the factorisation and the `B_hat`/`G_hat` table;
- two pipelined 8-point cores, with `B_hat` and `G_hat` as combinational logic;
- 8-bit input words;
- a controller that receives 16 samples over a UART with an AXI interface, runs the
  transform and sends 16 results back.

Choices made here:

- The 8-point core: a generic, symmetric-matrix core defaulting to the rounded DCT,
  rather than the ABDCT and its fast algorithm.
- Pipeline register placement and latency (4 cycles).
- Internal and output word lengths.
- Rounding of the ½ in `Z` (arithmetic shift, then negate).
- Synchronous active-high reset, applied to the valid bits and the control state only.
- The AXI4-Lite register map, status polling, and 2-byte result format.
- Default `METHOD = METHOD_VI`. All eight were built in the original work. VI has the
  lowest error together with VII and needs no halving.

The block diagram and the testbed drawing of the original work were not available. The
structure above is derived from the factorisation alone. One check supports it:
feeding a numerical model of the same butterfly, `G_hat`, `B_hat` and shuffle with the
exact `C_8` in place of `T_8` reproduces the published Frobenius errors of the eight
methods for N = 8 to three decimals (3.994, 3.826, 4.001, 4.001, 3.826, 4.006, 1.954,
1.954).

A generic coarse synthesis of `dct_testbed_top` (Method VI, rounded-DCT core) gives
about 920 flip-flop bits: 550 in the transform, the rest in the controller's block
buffers. This is the same order as the roughly 1.06k flip-flops
reported for the original FPGA build with the ABDCT core. The two are not directly
comparable.

## Verification

Every testbench is self-checking and ends with a `TB_RESULT checks=… failures=…` line.

| Testbench              | What it checks |
|------------------------|----------------|
| `tb_butterfly_2n`      | rows of `[I Ibar; Ibar -I]` on random and extreme inputs |
| `tb_g_hat`             | both `G_hat` choices against the explicit diagonal |
| `tb_b_hat`             | all four `B_hat` choices against explicit products of `Ibar`, `Z`, `J`, including the rounding of the halved entry |
| `tb_tn_core`           | rounded DCT and signed DCT (matrices computed from cosines in the testbench), a test matrix with ±2 entries, and one whose even rows do not split (direct path); streaming with gaps; latency exactly 2 |
| `tb_scaled_dct_2n`     | all eight methods at once: streaming against a stage-by-stage matrix reference; latency exactly 4; `T_16` recovered from impulses equals the full matrix product; `T_16·T_16^T` diagonal |
| `tb_testbed_ctrl`      | controller with a stand-in transform and a behavioural UART: byte routing, byte order, sign extension, back-to-back blocks, polling on an empty receive FIFO and on a full transmit FIFO |
| `tb_dct_testbed_top`   | whole design at default parameters, 24 blocks through the UART path including extreme blocks; fails if either polling stall or back-to-back operation never happened |
| `tb_workload_methods`  | the hardware experiment for every method: impulses and random blocks through the UART path; recovers `T_16`, checks orthogonality and prints `‖Ĉ16 − C16‖_F` |

`tb_workload_methods` prints the following distances to the exact 16-point DCT. The
order matches the analysis of the family: Methods VI and VII are well below JAM.

| Method                    | JAM   | I     | II    | III   | IV    | V     | VI    | VII   |
|---------------------------|-------|-------|-------|-------|-------|-------|-------|-------|
| ‖Ĉ16 − C16‖_F, rounded-DCT core | 4.116 | 3.900 | 4.081 | 4.081 | 3.900 | 4.025 | 2.166 | 2.166 |

`tb/uart_lite_model.sv` is a behavioural, non-synthesizable model of the UART
peripheral. It has random AXI ready delays and a slowly draining transmit FIFO. It also
counts the status polls that found nothing to receive or found the transmit FIFO full.
`tb/tb_ref_pkg.sv` holds the reference arithmetic in real numbers. That includes the
cosine matrices and the explicit products `P·diag(I,B_hat)·diag(T,T)·diag(I,G_hat)·butterfly`.

## Simulating and changing it

Verilator 5 is enough. From the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/dct_scaling_pkg.sv tb/tb_ref_pkg.sv tb/tb_dct_testbed_top.sv \
    --top-module tb_dct_testbed_top -o sim && ./obj_dir/sim
```

Replace the testbench file and top name to run any other testbench. Only the valid bits and
control state are reset; data registers are qualified by the valid bits. Lint with
`verilator --lint-only -Wall -y rtl rtl/dct_scaling_pkg.sv rtl/dct_testbed_top.sv`.

Main knobs:

- `dct_testbed_top #(.METHOD(...))` or `scaled_dct_2n #(.METHOD(...))` picks the
  method: `METHOD_JAM` or `METHOD_I` … `METHOD_VII`.
- `scaled_dct_2n #(.TN_MATRIX(...))` sets the 8-point core matrix, a `coef_mat_t`
  indexed `[k][n]`.
- `dct_scaling_pkg` sets `IN_W`, the input word length. The other widths follow from it.
- `testbed_ctrl` has parameters for the register offsets and status bits of a
  different UART.

The block size is fixed at 8+8 points: `N = 8` in the package and the 8×8 matrix type.
A 32-point version would need a 16-point core, for instance this design applied once
more.

## Files

- `rtl/dct_scaling_pkg.sv`: sizes, method and parameter-matrix enums, core matrices
- `rtl/butterfly_2n.sv`, `rtl/g_hat.sv`, `rtl/tn_core.sv`, `rtl/b_hat.sv`: the stages
- `rtl/scaled_dct_2n.sv`: the 16-point transform
- `rtl/testbed_ctrl.sv`: the UART/AXI controller
- `rtl/dct_testbed_top.sv`: the top level
- `tb/`: the testbenches above, the reference package and the UART model
