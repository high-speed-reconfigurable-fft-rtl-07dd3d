# Reconfigurable 2-/4-point FFT on Vedic multipliers

This is a small combinational circuit that computes the discrete Fourier
transform of either two or four 4-bit samples. A single `select` line picks
the length at run time. It holds two transform units, a 2-point and a 4-point
FFT. The unit that is not selected is held at zero so that it does not switch.
Every multiplication in the butterflies goes through a 4x4-bit multiplier
built by the *Urdhva Tiryakbhyam* ("vertically and crosswise") rule of Vedic
arithmetic. That multiplier is itself made of four 2x2-bit Vedic multipliers.
The adders and subtractors are plain ripple-carry circuits.

The RTL follows a published design of this name: "High Speed Reconfigurable
FFT Design by Vedic Mathematics" by A. Raman, A. Kumar and R. K. Sarin. The
publication gives the block diagram, the component list, the port names and
one simulated test vector. The rest had to be chosen here, including the
widths inside the datapath, the input order, the sign convention and the
overflow behaviour. Each such choice is listed in
[Where this RTL departs from or adds to the original](#where-this-rtl-departs-from-or-adds-to-the-original).

## Block diagram

```
                +--------------------+
 in1,in2,w0 --->| input  |  fft2     |---- y0, y1 ----+
                | switch |  (2-pt)   |                |   output   out1, out2,
 in1..in4, ---->|        |-----------|                +-> merge -> out2_im, out3,
 w0, w1         | idle   |  fft4     |---- X0..X3 ----+   (select) out4, out4_im
                | unit=0 |  (4-pt)   |
 select ------->|        +-----------+
                +--------+
```

| `select` | transform | outputs                                                                              |
|----------|-----------|--------------------------------------------------------------------------------------|
| 0        | 2-point   | `out1` = X0, `out2` = X1, all others 0                                              |
| 1        | 4-point   | `out1` = X0, `out2 + j·out2_im` = X1, `out3` = X2, `out4 + j·out4_im` = X3          |

Samples `in1..in4` and twiddles `w0`, `w1` are 4-bit unsigned numbers. All
outputs are 8-bit two's-complement numbers.

## The transforms

### 2-point FFT (`fft2`)

This is one radix-2 butterfly:

```
y0 = x0 + w·x1
y1 = x0 − w·x1
```

Here `w` is the real twiddle factor W₂⁰. With `w = 1` this is the 2-point DFT.
In 2-point mode the top feeds it `x0 = in1`, `x1 = in2` and `w = w0`.

### 4-point FFT (`fft4`)

This is a radix-2 decimation-in-time FFT in two stages. The samples must be
given in **bit-reversed order**: `in1 = x(0)`, `in2 = x(2)`, `in3 = x(1)`,
`in4 = x(3)`.

```
stage 1:   a = in1 + w0·in2      b = in1 − w0·in2        (fft2)
           c = in3 + w0·in4      d = in3 − w0·in4        (fft2)
stage 2:   X0 = a + w0·c         X2 = a − w0·c           (fft2)
           X1 = b + j·(w1·d)     X3 = b − j·(w1·d)
```

X1 and X3 share their real part `b`. The only extra hardware is one twiddle
product `w1·d` and its negation. With `w0 = w1 = 1` the result is

```
X(k) = Σ_n x(n) · j^(n·k)
```

This is the DFT with the kernel e^{+j2πnk/4}. Compared with the common
e^{−j2πnk/4} convention, the imaginary parts of X1 and X3 are swapped in sign.
For real input the outputs `(out2, out2_im)` therefore equal the conventional
X(3), and `(out4, out4_im)` equal the conventional X(1). This sign convention
and the bit-reversed order were chosen because they reproduce the
published test vector exactly (next section). If you want the other
convention, swap the two imaginary outputs.

`w0` and `w1` are inputs rather than constants. For a plain DFT both are 1.
Other values scale the corresponding products. This allows weighted or scaled
transforms, but it is also the main source of overflow.

### Worked example

This is the one test vector the design was published with. The inputs are
`in1..in4 = 0, 2, 1, 3` and `w0 = w1 = 1`.

| mode                | out1       | out2       | out2_im    | out3       | out4       | out4_im    |
|---------------------|------------|------------|------------|------------|------------|------------|
| 2-point, select = 0 | `00000010` | `11111110` | 0          | 0          | 0          | 0          |
| 4-point, select = 1 | `00000110` | `11111110` | `11111110` | `11111110` | `11111110` | `00000010` |

In decimal the 4-point results are X0 = 6, X1 = −2 − 2j, X2 = −2 and
X3 = −2 + 2j. Both testbenches `tb_fft4` and `tb_reconf_fft` check this vector
bit for bit.

## Vedic multiplication

### Urdhva Tiryakbhyam

The rule forms a product one column of digits at a time, starting from the
least significant column. For column *k*, take every digit pair
(a_i, b_j) with i + j = k. The one "vertical" pair or the "crosswise" pairs
are multiplied, and the products are added to the carry from column *k−1*.
The lowest digit of that sum is the result digit. The rest becomes the carry
into column *k+1*. For decimal 234 × 316 the columns are
4·6, 3·6 + 4·1, 2·6 + 3·1 + 4·3, and so on.

### `vedic_mult2x2`: one-bit digits

| column | pairs              | hardware                         | result                            |
|--------|--------------------|----------------------------------|-----------------------------------|
| 0      | a0·b0              | AND                              | p[0]                              |
| 1      | a1·b0 + a0·b1      | two ANDs, half adder             | p[1], carry k                     |
| 2      | a1·b1 + k          | AND, half adder                  | p[2], carry = p[3]                |

This comes to four AND gates and two half adders.

### `vedic_mult4x4`: 2-bit digits, built from four 2x2 multipliers

The operands are split into 2-bit digits: `a = {aH,aL}` and `b = {bH,bL}`.
The same rule then runs in radix 4.

| column | sum                      | width | result                       |
|--------|--------------------------|-------|------------------------------|
| 0      | aL·bL                    | 4 bit | p[1:0], carry c0 = bits 3:2  |
| 1      | aH·bL + aL·bH + c0       | 5 bit | p[3:2], carry c1 = bits 4:2  |
| 2      | aH·bH + c1               | 4 bit | p[7:4]                       |

Each digit product is a `vedic_mult2x2`. Each column sum is a `vedic_adder`.
The largest product is 15·15 = 225. It fits in 8 bits, so column 2 has no
carry out.

### `tw_mult`: 8-bit butterfly operand × 4-bit twiddle

After the first stage the butterfly operands are 8 bits wide, but the only
multiplier available is 4x4. `tw_mult` therefore splits the operand into
nibbles, `x = x_hi·16 + x_lo`. It forms both `x_lo·w` and `x_hi·w` in
`vedic_mult4x4` instances and adds them as `x_lo·w + (x_hi·w << 4)`. Only the
low 8 bits are kept.

The operand is a two's-complement number, but it is multiplied here as if it
were unsigned. Modulo 2⁸ the two products are identical, so no sign handling
is needed. The parameter `DATA_W` may be any multiple of 4, and the number of
nibbles follows from it.

## Number format and overflow

All internal values and outputs are `DATA_W = 8`-bit two's-complement numbers.
They wrap modulo 256 and are never saturated or scaled. A result is exact
whenever its true value lies in −128..127.

- **Unit twiddles (`w0 = w1 = 1`):** every output is exact. The largest
  magnitude is |X0| ≤ 4·15 = 60.
- **Twiddles above 1:** results can wrap. For example, the stage-1 product
  alone can reach 15·15 = 225.

The testbenches count how often wrap-around happens and compare against the
modulo-256 value.

## Run-time reconfiguration and operand isolation

`select` is an ordinary combinational input. The transform length can change
from one input vector to the next, and no reset or flush is needed.

The input switch holds the samples and twiddles of the idle unit at zero. Its
internal nodes then stay constant, which is how the run-time choice is meant
to save dynamic power.

An immediate assertion in `reconf_fft` (`idle_unit_isolated`) checks on every
evaluation that the idle unit's inputs are zero. Simulate with assertions on
(`--assert` in Verilator) to have it checked.

## Timing

The circuit has no clock, registers or reset. The outputs follow the inputs
after the combinational delay:

1. the 2-point path is one multiplier, then one adder or subtractor;
2. the 4-point path is two such stages in series;
3. the output merge adds one 2-to-1 multiplexer level.

The original FPGA implementation (Xilinx Virtex-II Pro XC2VP2, speed grade −6)
was reported as follows:

| circuit                              | delay     |
|--------------------------------------|-----------|
| reconfigurable circuit               | 13.325 ns |
| 2-point transform alone              | 8.251 ns  |
| 4-point transform alone              | 11.947 ns |

It used 69 slices and 127 four-input LUTs. Simulation cannot reproduce these
numbers, and they were not checked against this RTL.

If the circuit is used at a clock rate, register the inputs and outputs
outside it. One transform then completes per clock.

## Files

| file                      | contents                                                                      |
|---------------------------|-------------------------------------------------------------------------------|
| `rtl/fft_pkg.sv`          | widths `IN_W = 4`, `TW_W = 4`, `DATA_W = 8`; types `sample_t`, `twiddle_t`, `data_t`; `mode_e` |
| `rtl/vedic_mult2x2.sv`    | 2x2 Urdhva multiplier                                                         |
| `rtl/vedic_mult4x4.sv`    | 4x4 multiplier from four 2x2                                                  |
| `rtl/vedic_adder.sv`      | ripple-carry adder, `WIDTH` (default 8)                                       |
| `rtl/vedic_subtractor.sv` | `a + ~b + 1` on a `vedic_adder`                                               |
| `rtl/tw_mult.sv`          | `DATA_W`-bit × 4-bit multiply, low `DATA_W` bits                              |
| `rtl/fft2.sv`             | 2-point butterfly                                                             |
| `rtl/fft4.sv`             | 4-point FFT (three `fft2` + `tw_mult` + negation)                             |
| `rtl/reconf_fft.sv`       | top: input switch, both units, output merge                                   |

The hierarchy is
`reconf_fft → {fft2, fft4 → {3×fft2, tw_mult, vedic_subtractor}}`, with
`fft2 → {tw_mult → {vedic_mult4x4 → vedic_mult2x2, vedic_adder}, vedic_adder, vedic_subtractor}`.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/fft_pkg.sv tb/tb_reconf_fft.sv \
          --top-module tb_reconf_fft -Mdir obj_reconf
./obj_reconf/Vtb_reconf_fft
```

Replace `reconf_fft` with `vedic_mult2x2`, `vedic_mult4x4`, `vedic_adder`,
`vedic_subtractor`, `fft2` or `fft4` for the other blocks. Every testbench
runs in well under a second.

| testbench             | what it checks                                                                                                                                         |
|-----------------------|--------------------------------------------------------------------------------------------------------------------------------------------------------|
| `tb_vedic_mult2x2`    | all 16 operand pairs                                                                                                                                   |
| `tb_vedic_mult4x4`    | all 256 operand pairs                                                                                                                                  |
| `tb_vedic_adder`      | all 2¹⁷ combinations of `a`, `b` and `cin`                                                                                                             |
| `tb_vedic_subtractor` | all 2¹⁶ pairs, difference and borrow                                                                                                                   |
| `tb_fft2`             | the published vector; every `x0`, `x1` (8 bit) and `w` (4 bit), about 1 M vectors                                                                      |
| `tb_fft4`             | the published vector; 2000 random vectors against a direct DFT sum with unit twiddles; 50 000 random vectors against the butterfly equations with random twiddles |
| `tb_reconf_fft`       | end to end at the default widths (see below)                                                                                                           |

`tb_reconf_fft` runs three kinds of test:

1. the published vector in both modes;
2. every 2-point input combination;
3. 200 000 random vectors with a random `select`.

It counts how often each of these happened: 2-point operation, 4-point
operation, a 2→4 switch, a 4→2 switch and wrap-around. It fails if any count
is zero. The isolation assertion runs throughout.

The expected values in every testbench are computed independently of the RTL.
They come from plain integer arithmetic reduced modulo 2^width, not from the
Vedic structures.

## Where this RTL departs from or adds to the original

The original gives the block diagram, the components (Vedic adder,
subtractor, 4x4 multiplier from 2x2 multipliers) and the port names and
widths. It also gives one test vector with its results. The following choices
are this design's own.

- **Input order and imaginary sign.** Both are inferred from the published
  test vector. In natural order, 0, 2, 1, 3 would give X0 = 6,
  X1 = −1 + j, X2 = −4, which does not match what was published.
- **Naming of the imaginary outputs.** In the published waveform, `out2` and
  `out4` each appear twice. The second of each is called `out2_im` and
  `out4_im` here.
- **Meaning of `w0` and `w1`.** `w0` multiplies the lower butterfly input in
  every real-twiddle butterfly. `w1` is the magnitude of the imaginary twiddle
  W₄¹.
- **Unused outputs.** In 2-point mode the published waveform shows no value on
  the 4-point-only outputs. Here they are driven to 0.
- **How the idle unit saves power.** The original only states that run-time
  reconfiguration saves power. Operand isolation is this design's reading.
- **Datapath and arithmetic.** The 8-bit internal width, the modulo-256
  wrap-around and the nibble-split twiddle multiplier are all chosen here.
- **Adder and subtractor structure.** These are named but not described in
  the original. The simplest ripple-carry forms are used.
- **Claims not built.** The original's conclusion mentions transform pruning
  for OFDMA and non-power-of-two lengths. Nothing else in it describes them,
  and they are not part of this RTL.
- **Nikhilam sutra.** The original names a second Vedic method, the Nikhilam
  sutra, but does not use it in the circuit. Only Urdhva Tiryakbhyam is used
  here.
