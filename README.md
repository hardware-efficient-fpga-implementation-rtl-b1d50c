# Sigmoid by mixed-radix hyperbolic CORDIC: a 16-bit, multiplier-free pipeline

This RTL evaluates the logistic sigmoid, sigma(theta) = 1 / (1 + e^-theta), for
inputs in [-1, 1]. It uses only adders, multiplexers and fixed shifts: no
multipliers, no lookup tables and no divider. It returns one 16-bit result per
clock, 28 cycles after the input.

The method comes from the paper by C. Panchal, A. Changela and M. Roy,
"Hardware-Efficient FPGA Implementation of Sigmoid Function Using Mixed-Radix
Hyperbolic Rotation CORDIC". That paper gives the algorithm and the
architecture, but no HDL. The code here is an independent implementation of
it. Where the paper leaves a detail open, this implementation makes its own
choice, and the places where it does so are listed below.

## The idea

The sigmoid is a shifted and scaled hyperbolic tangent:

    sigma(theta) = (1 + tanh(theta / 2)) / 2

So for theta in [-1, 1] the hardware needs tanh of an angle in [-0.5, 0.5].
That small range is what makes the design cheap. The data flows through three
steps:

    theta --(>>>1)--> z0 = theta/2
                       |
           +-----------v-------------------------------+
           | mr_hrc: hyperbolic rotation CORDIC         |
           |   (x, y, z) = (1/Kh, 0, theta/2)           |
           |   r2_hrc : radix-2 iterations j = 2..9     |  8 stages
           |   r4_hrc : radix-4 iterations j = 4..7     |  4 stages
           +-----------+-------------------+-----------+
                x = cosh(theta/2)    y = sinh(theta/2)
           +-----------v-------------------v-----------+
           | r2_lvc: linear vectoring CORDIC, j = 0..14 |  15 stages
           |   z -> y / x = tanh(theta/2)               |
           +-----------+-------------------------------+
           +-----------v-------------------------------+
           | tanh_to_sigmoid: (tanh + 1) >>> 1          |  1 stage
           +-----------+-------------------------------+
                       v
                  sigma(theta)

1. Hyperbolic rotation. A vector that starts at (1/Kh, 0) and is rotated
   hyperbolically by the angle theta/2 ends at (cosh, sinh). Kh is the gain
   of the rotation steps.
2. Linear vectoring. This step divides sinh by cosh with shifts and adds.
3. Output. One is added to the quotient and the sum is halved.

Every CORDIC iteration has its own adders and its own pipeline register. The
pipeline never stalls.

## Number format

All datapath words are 16-bit two's-complement numbers with 14 fraction bits
(Q2.14). The range is [-2, 2) and one LSB is 2^-14 = 6.1e-5.

The 16-bit width comes from the paper. The split into 2 integer bits and 14
fraction bits is this implementation's choice. It is the finest format that
holds the largest internal values: cosh(0.5) = 1.128, 1/Kh = 1.044, and
quotients up to 2 inside the divider.

- Right shifts are arithmetic and truncate (they round towards minus
  infinity).
- Constants are rounded to the nearest LSB.

`cordic_pkg` holds the format (`W`, `F`), the types `fix_t` and `vec_t`
(the {x, y, z} triple), and the constant generators. All constants are
computed during elaboration from real-valued `$atanh` and `$sqrt`, so none of
them is typed in by hand:

| constant                     | formula                                   | Q2.14 value            |
|------------------------------|-------------------------------------------|------------------------|
| 1/Kh (start x)               | 1 / prod_{j=2..9} sqrt(1 - 2^-2j) = 1.0437 | 17100                 |
| radix-2 angles, j = 2..9     | atanh(2^-j)                               | 4185, 2059, 1025, 512, 256, 128, 64, 32 |
| radix-4 angles, \|sigma\| = 1, j = 4..7 | atanh(4^-j)                    | 64, 16, 4, 1           |
| radix-4 angles, \|sigma\| = 2, j = 4..7 | atanh(2 * 4^-j)                | 128, 32, 8, 2          |
| vectoring steps, j = 0..14   | 2^-j                                      | 16384 ... 1            |

## Radix-2 rotation stages (`r2_hrc`, `r2_hrc_iter`)

Each iteration j performs one rotation step:

    d  = +1 if z >= 0 else -1
    x' = x + d * (y >>> j)
    y' = y + d * (x >>> j)
    z' = z - d * atanh(2^-j)

The critical path of a stage is one adder.

The iterations start at j = 2, not at the textbook j = 1. The sum of
atanh(2^-j) from j = 2 upwards is about 0.506. That covers the required angle
range of ±0.5, and the first stage's angle stays small.

The iterations stop at j = 9. They are not repeated at j = 4 and j = 13, as
classic hyperbolic CORDIC does to guarantee convergence. Without the
repetition the radix-2 stages do not drive the residual angle to within one
step. They do leave it below 0.0067 for every input in range: the testbench
checks this for every input, and the paper quotes about 0.0061. The radix-4
stages finish the job.

The gain of these eight steps, Kh = 0.958, is corrected for free. The
rotation simply starts from x = 1/Kh instead of x = 1.

## Radix-4 rotation stages (`r4_hrc`, `r4_hrc_iter`, `r4_digit_sel`)

This is the part of the design that needs the most care. A radix-4 step
rotates by atanh(sigma * 4^-j), with a digit sigma in {-2, -1, 0, 1, 2}, and
resolves two bits of angle at a time:

    x' = x + sigma * y * 4^-j
    y' = y + sigma * x * 4^-j
    z' = z - sign(sigma) * atanh(|sigma| * 4^-j)

In hardware, each coordinate has a three-way multiplexer. It picks the other
coordinate times 2, times 1 or times 0, and the result is shifted by 2j. The
multiply-by-2 and the shift are merged into one right shift, by 2j-1 or 2j.
This gives exactly the same bits as shifting left first, but cannot overflow
16 bits. A third multiplexer picks the angle constant. The critical path of a
stage is the digit compare, then a multiplexer, then an adder.

**Digit selection.** The rule is SRT-like. It looks at the scaled residual
w = 4^j * z and compares it with ±0.5 and ±1.5:

    w >= 1.5          -> +2
    0.5 <= w < 1.5    -> +1
    -0.5 <= w < 0.5   ->  0
    -1.5 <= w < -0.5  -> -1
    w < -1.5          -> -2

After a step the new scaled residual is 4(w - sigma), which is at most 2 in
magnitude, so the scaled residual stays within the reach of the digit set.

The four stages starting at j = 4 can absorb a residual of up to
sum atanh(2 * 4^-j) = 0.0104. That is larger than the 0.0067 the radix-2
stages leave behind.

`r4_digit_sel` needs only 4 bits for this. Every threshold is a multiple of
0.5, so it is enough to know q = floor(2w), a 4-bit two's-complement number:
a sign bit, two integer bits and one half bit. These are the bits of z of
weight 2^(2-2j) down to 2^(-1-2j); a bit below the LSB of z reads as zero.
The digit is +2 for q >= 3, +1 for q >= 1, 0 for q >= -1, -1 for q >= -3,
and -2 otherwise. The slice is exact while |w| < 4. An assertion in
`r4_hrc_iter` checks, on every valid sample entering a stage, that
|4^j * z| < 3.

**No gain correction.** A radix-4 step's gain depends on its digit. For
j >= 4 the gain sqrt(1 - sigma^2 * 4^-2j) differs from 1 by at most 3.1e-5,
which is half an LSB. This is why the radix-4 part starts at j = 4, and why
the design applies no correction at all.

**A property of this format.** In Q2.14, the residual that enters the last
stage (j = 7) is a whole number of LSBs between -2 and +1. Digit +2 therefore
never occurs at j = 7. Digit -2 does occur, because truncation is
asymmetric. The end-to-end testbench checks every other (stage, digit) pair.

## Vectoring divider (`r2_lvc`, `r2_lvc_iter`)

The divider is started with (x, y, z) = (cosh, sinh, 0). It drives y to zero
and accumulates the quotient in z:

    d  = +1 if y >= 0 else -1
    x' = x
    y' = y - d * (x >>> j)
    z' = z + d * 2^-j

The paper states a convergence range of |y/x| <= 2, which means the
iterations start at j = 0. The paper does not give the number of iterations.
This implementation runs j = 0..14, down to the last fraction bit, which
makes 15 stages.

Because this block is a general divider, it is tested on its own with ratios
up to 1.9. In the sigmoid pipeline the ratio never exceeds tanh(0.5) = 0.462.
The divisor must be positive; an assertion checks this.

## Output stage (`tanh_to_sigmoid`)

This stage computes (tanh + 1) >>> 1 and registers the result.

## Accuracy

The end-to-end testbench applies all 32769 representable inputs in [-1, 1]
and compares each result with the real-valued sigmoid:

| metric                        | this RTL  | reported for the original design |
|-------------------------------|-----------|----------------------------------|
| mean absolute error           | 5.11e-5   | 4.23e-4                          |
| maximum absolute error        | 3.04e-4   | not given                        |

The error comes mostly from truncation in the 15 vectoring stages and the 12
rotation stages: each truncating shift costs up to one LSB. The halving at
the output adds up to half an LSB. The original work does not say which input
samples its mean error was measured over, so the two numbers are not
strictly comparable. The testbench requires every error to be below 4.0e-4
and the mean error to be below 4.23e-4.

## Interface and timing of the top, `sigmoid_mr_cordic`

| port        | dir | width | meaning                                                          |
|-------------|-----|-------|------------------------------------------------------------------|
| `clk`       | in  | 1     | clock, rising edge                                               |
| `rst_n`     | in  | 1     | synchronous, active-low reset; clears the valid pipeline only    |
| `in_valid`  | in  | 1     | `theta` holds a sample this cycle                                |
| `theta`     | in  | 16    | Q2.14 input; must satisfy \|theta\| <= 1.0 (checked by an assertion) |
| `out_valid` | out | 1     | `sigmoid` holds a result this cycle                              |
| `sigmoid`   | out | 16    | Q2.14 result, in about [0.269, 0.731]                            |

- **Latency.** The latency is (R2_J_LAST-R2_J_FIRST+1) + (R4_J_LAST-R4_J_FIRST+1)
  + (LVC_J_LAST-LVC_J_FIRST+1) + 1. At the defaults this is 8 + 4 + 15 + 1 = 28
  cycles.
- **Throughput.** One sample per clock. There is no back-pressure: results
  leave in input order, exactly 28 cycles after they enter, and gaps in the
  input stream pass through as gaps.
- **Data registers.** They are not reset. Each one loads only when its valid
  bit is set.

Parameters of the top, all passed down to the sub-blocks:

| parameter        | default | origin                                         |
|------------------|---------|------------------------------------------------|
| `R2_J_FIRST`     | 2       | paper                                          |
| `R2_J_LAST`      | 9       | paper                                          |
| `R4_J_FIRST`     | 4       | paper                                          |
| `R4_J_LAST`      | 7       | paper                                          |
| `LVC_J_FIRST`    | 0       | follows from the stated \|y/x\| <= 2 convergence range |
| `LVC_J_LAST`     | 14      | this implementation (one stage per fraction bit) |
| `cordic_pkg::W`  | 16      | paper                                          |
| `cordic_pkg::F`  | 14      | this implementation                            |

The start value 1/Kh is recomputed from `R2_J_FIRST` and `R2_J_LAST`. If you
change the iteration ranges, the convergence conditions discussed above must
still hold:

- the radix-2 reach must cover the input angle;
- the radix-4 reach must cover the radix-2 residual;
- the radix-4 stages must start late enough that their gain is 1.

## Where this RTL departs from, or adds to, the paper

- **Shift amounts.** In the paper's iteration diagrams the shifter boxes are
  labelled ">>1", and the vectoring diagram labels the z constant as
  something like "6^j 2^-j". The RTL follows the equations instead: shifts by
  j (radix-2) or 2j (radix-4), and the constant d * 2^-j.
- **Rotation equations.** The paper prints no rotation equations for the
  radix-2 or radix-4 rotation stages. The standard hyperbolic forms above are
  used.
- **Radix-4 shift.** The 4^-j shift after the radix-4 multiplexers is not
  drawn in the paper; it follows from the elementary angle atanh(sigma * 4^-j).
- **Digit encoding.** The paper says the digit selection uses "4 binary
  bits" but gives no encoding. The 4-bit slice described above, and its bit
  positions, are this implementation's own.
- **Choices of this implementation.** The Q2.14 split, the vectoring
  iteration count, the valid/reset scheme, truncating shifts, and a register
  after the output adder.
- **Half-angle.** The theta/2 is formed inside the top by a wired shift.
- **Vectoring mode.** One sentence of the paper calls the second stage a
  "hyperbolic vectoring" block. Its equations are those of linear vectoring,
  which is what returns y/x, and the RTL follows the equations.
- **Radix-2 reach.** The paper quotes a reach of 0.5688 for the radix-2
  stages. The sum of atanh(2^-j) for j = 2..9 is 0.504. Both values exceed
  0.5, and the testbench confirms convergence over the whole input range.
- **tanh(0.5).** The paper quotes it as 0.52; the true value is 0.462. This
  does not affect the design.
- **Resource use.** The reported FPGA utilisation (835 slices, no DSP
  blocks) has not been reproduced here. Generic synthesis of this RTL gives
  141 adder, subtractor and comparator cells and 1219 flip-flop bits, with
  no multipliers.

## Files

| file | contents |
|------|----------|
| `rtl/cordic_pkg.sv` | format, types, constant functions |
| `rtl/sigmoid_mr_cordic.sv` | top: halving, rotator, divider, output stage, input-range assertion |
| `rtl/mr_hrc.sv` | mixed-radix rotator: start vector, radix-2 then radix-4 pipeline |
| `rtl/r2_hrc.sv`, `rtl/r2_hrc_iter.sv` | radix-2 rotation pipeline and one iteration |
| `rtl/r4_hrc.sv`, `rtl/r4_hrc_iter.sv` | radix-4 rotation pipeline and one iteration |
| `rtl/r4_digit_sel.sv` | radix-4 digit selection (combinational) |
| `rtl/r2_lvc.sv`, `rtl/r2_lvc_iter.sv` | vectoring divider pipeline and one iteration |
| `rtl/tanh_to_sigmoid.sv` | (1 + tanh) / 2 |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the end-to-end `tb_sigmoid_mr_cordic` |

## Simulating

Every testbench is self-checking. It compares against real-valued math
(`$cosh`, `$sinh`, `$exp`), checks the exact latency, has a watchdog, and
ends with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/cordic_pkg.sv tb/tb_sigmoid_mr_cordic.sv --top-module tb_sigmoid_mr_cordic
    ./obj_dir/Vtb_sigmoid_mr_cordic +verilator+rand+reset+2

Replace the testbench name to run the others:

- `tb_r2_hrc`
- `tb_r4_digit_sel`
- `tb_r4_hrc`
- `tb_mr_hrc`
- `tb_r2_lvc`
- `tb_tanh_to_sigmoid`

Each finishes in well under a second.

The end-to-end testbench runs the top at its default parameters. It also
reports how often each internal mechanism was exercised:

- both rotation directions of the radix-2 stages;
- both directions of the vectoring stages;
- each radix-4 digit in each radix-4 stage;
- idle input cycles;
- a reset while samples are in flight, after which none of them may emerge.
