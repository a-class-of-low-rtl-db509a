# Multiparametric 8-point DCT approximations in a pipelined adder network

The 8-point discrete cosine transform (DCT) is the workhorse of JPEG and of
the smaller HEVC transforms, but its exact form needs irrational constants.
An *approximate* DCT replaces the 64 matrix entries by small numbers that
hardware can multiply by for free: 0, ±1/2, ±1 and ±2 are only wiring, a
shift and a negation. This RTL computes one family of such approximations.
An 8×8 integer matrix **T(a)** has fixed entries 0 and ±1 and eight free
entries `a1..a8`:

```
        | 1   1    1    1    1    1    1    1  |
        | 1   a1   a2   0    0   -a2  -a1  -1  |
        | 1   0    0   -1   -1    0    0    1  |
T(a) =  | a3  0   -1   -a4   a4   1    0   -a3 |
        | 1  -1   -1    1    1   -1   -1    1  |
        | a5 -1    0    a6  -a6   0    1   -a5 |
        | 0  -1    1    0    0    1   -1    0  |
        | 0  -a7   a8  -1    1   -a8   a7   0  |
```

Each `a_i` is taken from {0, ±1/2, ±1, ±2}. The all-zero vector gives the
modified round-off DCT (MRDCT) and the all-ones vector gives the round-off
DCT (RDCT). A search over this class for orthogonal members that are close
to the DCT and code well gives seven optimal vectors, all available in
`dct_pkg`:

| j | a = [a1 … a8]                    | name in `dct_pkg` | additions | shifts | latency |
|---|----------------------------------|-------------------|-----------|--------|---------|
| 1 | [0 0 0 0 0 0 0 0]                | `A_T1_MRDCT`      | 14        | 0      | 4       |
| 2 | [1 0 0 0 1 0 0 0]                | `A_T2_OCBT`       | 16        | 0      | 4       |
| 3 | [1 0 0 1 1 0 0 1]                | `A_T3`            | 18        | 0      | 4       |
| 4 | [1 0 0 ½ 1 0 0 ½]                | `A_T4`            | 18        | 2      | 4       |
| 5 | [1 1 1 −1 1 −1 −1 −1]            | `A_T5`            | 22        | 0      | 5       |
| 6 | [1 1 1 1 1 1 1 1]                | `A_T6_RDCT`       | 22        | 0      | 5       |
| 7 | [1 ½ ½ 1 1 ½ ½ 1]                | `A_T7` (default)  | 22        | 4      | 5       |

Vector j = 7 has the best coding performance of the class, so it is the
default everywhere. Vectors 3, 4, 5 and 7 are new members of the class;
1, 2 and 6 were known before. The hardware computes T(a)·x, not an
orthonormal DCT. The missing diagonal scaling (1/√8, 1/2 or
1/√(2a²+2b²+2) per row) is meant to be folded into the quantiser that
follows the transform.

## From matrix to pipeline

Multiplying by T(a) directly would cost at least 24 additions. The RTL
instead uses the sparse factorisation

```
T(a) = P · K(a) · A2 · A1
```

with one pipeline stage per factor. Every arithmetic stage adds one bit of
word length and registers its result.

```
x (8×8 bit) → [input reg] → A1 (9 bit) → A2 (10 bit) → K(a) (11 bit, 1–2 clocks) → P → X (8×11 bit)
```

* **A1** (`dct8_a1`, 8 additions) is the outer butterfly:
  `y_i = x_i + x_{7−i}` and `y_{4+i} = x_{3−i} − x_{4+i}` for i = 0..3.
* **A2** (`dct8_a2`, 4 additions) is a butterfly on the even half:
  `z0 = y0+y3`, `z1 = y1+y2`, `z2 = y1−y2`, `z3 = y0−y3`.
  `z4..z7 = y4..y7` pass straight through.
* **K(a)** (`dct8_k`) holds all the parameters. On the even half it
  computes `w0 = z0+z1`, `w1 = z0−z1`, `w2 = −z2` and `w3 = z3`. On the odd
  half it applies a 4×4 block:

  ```
  w4 = −a4·z4 − z5 + a3·z7        w5 = a6·z4 − z6 + a5·z7
  w6 =  a2·z5 + a1·z6 + z7        w7 = −z4 + a8·z5 − a7·z6
  ```

  Every zero `a_i` removes one adder, so the whole transform costs
  22 − (number of zero `a_i`) additions.
* **P** is the permutation (0)(1 4 3 2 6)(5)(7). It is wiring inside
  `dct8_core` and restores the natural order: X0=w0, X1=w6, X2=w3, X3=w4,
  X4=w1, X5=w5, X6=w2, X7=w7.

### How deep is K(a)?

Each row of the odd block has one fixed ±1 term plus up to two parametric
terms. If every row has at most two non-zero terms (j = 1..4), the stage is
one adder level and one clock. If some row has three terms (j = 5..7), the
first level adds the fixed term and one parametric term, the third term is
registered alongside, and a second level finishes the sum. That takes two
clocks. With the input register, the core latency is therefore 4 or 5
clocks. This agrees with the reported FPGA latencies for all seven
transforms. The exact register placement is this implementation's reading
of those figures; `dct_pkg::k_levels` and `dct_pkg::core_latency` compute
it from the vector.

### Halves, rounding and word length

The hardest part to get right is a row that holds a 1/2. The result of such
a row is not an integer. The design sums those four odd-half rows at twice
their value: every coefficient becomes `2·a_i`, which is always an integer,
and the fixed entries become ±2. It then halves the sum once with an
arithmetic right shift. The output is therefore ⌊T(a)·x⌋, with a single
rounding per coefficient. Rows without a 1/2 are exact. The published
description says only that such members "require bit-shifting"; this
rounding rule is this design's choice. Any model the outputs are compared
against must use the same floor.

For this reason the parameter vector is stored everywhere as `2·a`, in the
type `avec2x_t` (eight 4-bit signed fields indexed 1..8). To select a
transform outside the table, write its doubled vector, for example
`{4'sd2, 4'sd1, ...}` for `a1 = 1, a2 = 1/2, ...`.

Word lengths follow the rule of one bit per arithmetic stage: 8 → 9 → 10
→ 11. That is enough for every member with |a_i| ≤ 1. The largest odd-row
magnitude is 3·255 = 765, and |X0| ≤ 8·128 = 1024. A vector containing ±2
(allowed by the class, but not used by any of the seven) makes K(a) grow by
two bits, so the output is 12 bits. `dct_pkg::k_grow` handles this, and the
port widths follow it.

### Interface and timing of `dct8_core`

| port        | dir | width     | meaning                                      |
|-------------|-----|-----------|----------------------------------------------|
| `clk`       | in  | 1         | clock                                        |
| `rst_n`     | in  | 1         | asynchronous active-low reset                |
| `in_valid`  | in  | 1         | `x` holds a vector this clock                |
| `x[8]`      | in  | 8 signed  | samples x0..x7                               |
| `out_valid` | out | 1         | `X` holds a result                           |
| `X[8]`      | out | 11 signed | T(a)·x (12 bits if some \|a_i\| = 2)         |

A vector presented in clock *t* appears in clock *t + 4* (j = 1..4) or
*t + 5* (j = 5..7). A new vector may be presented every clock, and there is
no back-pressure. Only the valid flags are reset; the data registers are
not.

## The FPGA testbed around the core

The published design was checked on an FPGA with a small test system, and
`dct_testbed_top` reproduces that system:

```
PC <── uart_rx / uart_tx ──> uart_axil <── AXI4-Lite ──> dct_ctrl <──> dct8_core
```

The PC sends eight signed bytes. The controller feeds them to the core and
returns the eight results, and the PC compares them with a software model.
The published description names the blocks and the AXI4 link. Everything
below about their insides is this design's own.

**UART** (`uart_axil`, with helper modules `uart_rx` and `uart_tx`): 8N1
framing, least significant bit first. The bit time is `CLKS_PER_BIT`
clocks; the default of 868 gives 115200 baud from 100 MHz. The receiver
samples each bit in the middle of its period after a two-flip-flop
synchroniser. Each direction has a one-byte holding register. The AXI4-Lite
slave exposes three 32-bit registers:

| offset | name      | access | content                                                                 |
|--------|-----------|--------|-------------------------------------------------------------------------|
| 0x0    | RX_DATA   | read   | received byte; reading empties the buffer                               |
| 0x4    | TX_DATA   | write  | byte to send; ignored while TX_FULL                                     |
| 0x8    | STATUS    | read   | bit0 RX_VALID, bit1 RX_OVERRUN (cleared by reading STATUS), bit3 TX_FULL |

**Controller** (`dct_ctrl`): an AXI4-Lite master that repeats these steps:

1. Poll STATUS until RX_VALID is set, then read RX_DATA. Do this eight
   times to collect x0..x7.
2. Pulse `core_valid`, then wait for `core_out_valid`. While waiting it
   counts the clocks and reports them as `core_cycles`.
3. Send the results X0..X7 as 16-bit two's-complement words, low byte
   first. Before each byte it polls STATUS until TX_FULL is clear, then
   writes TX_DATA.

`packets` counts the completed exchanges.

**AXI4-Lite link** (`axi4l_if`): the five standard channels with
valid/ready handshakes. Assertions check that a source holds valid and a
stable payload until the transfer is accepted.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/dct_pkg.sv tb/dct_ref_pkg.sv tb/tb_dct8_core.sv --top-module tb_dct8_core
./obj_dir/Vtb_dct8_core
```

Substitute any other testbench name. `tb/dct_ref_pkg.sv` is the reference
model. It evaluates T(a)·x straight from the 8×8 matrix, not through the
factorisation, and applies the same floor for rows with 1/2.

| testbench              | what it establishes |
|------------------------|---------------------|
| `tb_dct8_a1`, `tb_dct8_a2` | butterfly equations, extremes of the input range, 1-clock latency |
| `tb_dct8_k`            | K(a) for all seven vectors plus one mixing ±1/2 and ±2, with realistic z ranges and gaps in `in_valid`; latency 1 or 2 |
| `tb_dct8_core`         | T(a)·x against the matrix for the same eight vectors at full rate, with random gaps; latency 4 or 5 as published |
| `tb_uart_axil`         | reception, overrun, framing and bit time of transmission, TX_FULL, and a write while full being dropped |
| `tb_dct_ctrl`          | packet sequencing, byte order, no write while TX_FULL, AXI handshakes against a slave with random delays |
| `tb_dct_testbed_top`   | the whole testbed at its default parameters: packets in [−10, 10] (the published test range), full-range and extreme packets; also confirms that waiting for input, stalling on a full transmitter and the 5-clock latency all occur |
| `tb_dct_testbed_all`   | the published test for all seven transforms side by side (8 clocks per bit), checking results and each transform's latency |

The full-size testbench runs in about one second.

## What this RTL does not contain

* **No orthonormal scaling.** The diagonal scaling S(a) is not applied, as
  explained above.
* **No 16- or 32-point transforms.** Larger transforms can be built by
  doubling: two N-point instances plus 2N additions make a 2N-point
  transform. These variants were only evaluated in software, and the
  structure of the doubling is not described in enough detail to build
  here.
* **No 2-D block transform.** An 8×8 image block needs a row pass, a
  transpose memory and a column pass on 11-bit data. Only the 1-D core is
  provided, as in the FPGA evaluation. A column-pass instance can be made
  with `IN_W = 11`.
* **No inverse transform.** Because the matrices are orthogonal, the
  inverse is the transpose and has the same cost, but only the forward
  transform was built in hardware, and that is what is given here.
* **Parts invented for the testbed.** The clock frequency, baud rate, UART
  register map, output byte framing and controller polling scheme are not
  taken from the original test system; they are this design's own.
