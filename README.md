# Goldschmidt divider with Mitchell multipliers

A signed fixed-point divider that never divides. It rewrites `a / b` as a product
that converges to the quotient, and it computes each product with a logarithmic
(Mitchell) multiplier. That multiplier is an adder and some shifters rather than an
array multiplier. Every division takes the same 11 clock cycles, whatever the size of
the quotient. The price is accuracy: the quotient is within about 1 % of the exact
value, not bit-exact.

The RTL reimplements the divider described in "FPGA Design and Implementation of
Fixed-Point Fast Divider Using Goldschmidt Division Algorithm and Mitchell
Multiplication Algorithm" (J. Yang, 2025). It keeps that design's block partition,
enable encoding, state sequence and arithmetic. Where that description leaves a point
open, this RTL makes its own choice; those choices are listed under
[Where this RTL departs or chooses](#where-this-rtl-departs-or-chooses).

## The algorithm

**Goldschmidt iteration.** Scale the divisor `b` by a power of two into `b0 ∈ [0.5, 1)`.
Scale the dividend `a0` by the same power of two. Then repeat:

    m_s = 2 - b_{s-1}
    a_s = m_s · a_{s-1}
    b_s = m_s · b_{s-1}

If `b = 1 - y`, then `b_s = 1 - y^(2^s)`, which goes to 1 quadratically. The ratio
`a_s / b_s` never changes, so `a_s` goes to the quotient. The two multiplications of a
step are independent of each other, so they run in parallel. The hardware runs four
iterations, reusing one subtractor and two multipliers.

**Mitchell multiplication.** Write each operand as `2^k (1 + x)` with `x ∈ [0, 1)`. Then
`log2` of the operand is about `k + x`. The product is about `2^(kN+kM) (1 + xN + xM)`. If
`xN + xM` carries past 1, the product is `2^(kN+kM+1) (xN + xM)` instead. On its own this
can be up to 11 % low. The exact error term is known in closed form:

| case            | exact error of the plain product |
|-----------------|----------------------------------|
| `xN + xM < 1`   | `2^(kN+kM) · xN · xM`            |
| `xN + xM >= 1`  | `2^(kN+kM) · (1-xN)(1-xM)`       |

The multiplier computes this error term `C` with a second, plain Mitchell multiplier
and adds it back. That brings the worst-case error to about 3 %. The result is never
above the exact product.

A 3 % multiplier does not make the Goldschmidt quotient 3 % wrong. The coefficient
`m` is the same for numerator and denominator. Much of the multiplier error therefore
shows up in `b_s`, and the next coefficient `2 - b_s` largely compensates for it. After
four iterations the quotient error is below 1 %, and usually a few tenths of a percent.

## Number formats

With the default parameters:

| signal                              | format |
|-------------------------------------|--------|
| `dividend`, `divisor`               | 32-bit two's complement: a sign bit over `WIDTH_DIVIDEND` = `WIDTH_DIVISOR` = 31 magnitude bits |
| internal words `*_fix`, `*_in`, `*_out` | 64-bit unsigned fixed point: `IW` = 32 integer bits, `EXTENSION` = 32 fraction bits |
| `{sign_out, quo_int, quo_fra}`      | one 65-bit two's complement number: sign, `WIDTH_QUO` = 32 integer bits, `WIDTH_FRA-1` = 32 fraction bits |

`IW` is one bit wider than the wider operand magnitude, so `|-2^31|` fits. For a
negative quotient the output is the two's complement of the whole 65-bit number.
Example: -0.4868 reads `sign_out=1`, `quo_int=0xFFFFFFFF`, `quo_fra=0x835...`.
`WIDTH_FRA` counts the sign bit, which is why 33 gives a 32-bit fraction.

## The corrected Mitchell multiplier (`mitchell_multiplier`, `mitchell_correction`, `aux_shifter`)

This is the part that takes the most reading. All operands are fixed-point integers
with `E = EXTENSION` fraction bits.

1. **Leading one.** `aux_shifter` scans each operand from the MSB. It returns
   `shift_length`, the index of the leading one plus one (0 for zero).
2. **Characteristic and mantissa.** An operand of at least 1.0 has `shift_length > E`.
   Its characteristic is `k = shift_length - E - 1`, and `x = (op >> k)` with the
   leading one dropped (the low `E` bits). An operand below 1.0 instead gets a left
   pre-shift `sub = E - shift_length + 1`, and `x = (op << sub)` with the leading one
   dropped. Bits shifted out to the right are lost. This is one of two truncation
   points.
3. **Main term.** `s = xN + xM` is `E+1` bits wide. Its top bit is the carry.
   The main mantissa is `(1.s_frac) << carry`, i.e. `1 + s` or `2s`.
4. **Correction.** The operands of the correction multiplier are `xN, xM` when
   there is no carry, and `1-xN, 1-xM` when there is. Both are below 1. So
   `mitchell_correction` only needs the left pre-shift: it uses a second
   `aux_shifter`, forms `x' = (x << sub) - 1`, adds, and shifts
   `(1 + x_C) << k_C` right by `sub_a + sub_b`. This right shift truncates to `E` bits,
   the second truncation point. A zero fraction gives `C = 0`.
5. **Scale.** `(main + C)` is shifted by `e = kN + kM - subN - subM`: left if
   `e ≥ 0`, else right, truncating. A zero operand gives zero. A product wider than
   the word wraps. The divider cannot produce one: its quotient always fits.

Worked example, from the first iteration of 53/11. `a0 = 3.3125` (`0x3_50000000`) and
`m1 = 1.3125`:

- `kN = 1`, `xN = 0.65625`; `kM = 0`, `xM = 0.3125`.
- `s = 0.96875`: no carry, main mantissa `1.96875`.
- Correction: `0.65625 → 1.3125·2^-1` and `0.3125 → 1.25·2^-2`. The fractions sum
  to `0.5625`, so `C = 1.5625 · 2^-3 = 0.1953125`.
- Product: `(1.96875 + 0.1953125) · 2^1 = 4.328125` (`0x4_54000000`). The exact
  product is 4.3477 (−0.45 %).

## Control and timing

The controller has ten states: `idle`, then `iterK_1` (coefficient step) and
`iterK_2` (multiply step) for K = 1…4, then `dataout`. It drives `en[3:0]`:

| en     | meaning | data register loads |
|--------|---------|---------------------|
| `0001` | idle; the input sign converter samples the operands | `*_fix` |
| `0000` | start accepted | `*_fix` |
| `0011` | first coefficient step | `*_fix` |
| `0010` | coefficient step, iterations 2–4 | `*_out` (previous result) |
| `0100` | multiply step: iteration unit registers `a·m`, `b·m` | holds |
| `1000` | data out: output converter registers the quotient | `*_out` |

The coefficient `2 - divisor_in` and both products are combinational paths from the
data register to the iteration unit's output registers. One Goldschmidt iteration
therefore spans the two cycles `0010` / `0100`.

Cycle by cycle, counting rising edges from the edge that first samples new operands
(edge 0). Each row gives the state after that edge:

| edge | start | en     | what happens |
|------|-------|--------|--------------|
| 0    | 1     | `0001` | trigger registers operands, raises `start` |
| 1    | 0     | `0000` | magnitudes and sign registered; normalization (combinational) |
| 2    |       | `0011` | `a0`, `b0` in the data register; `m1 = 2 - b0` |
| 3    |       | `0100` | |
| 4    |       | `0010` | `a1`, `b1` registered |
| 5    |       | `0100` | `a1`, `b1` in data register, `m2` |
| 6, 8 |       | `0010` | `a2`, `a3` registered |
| 7, 9 |       | `0100` | `a2`, `a3` in data register |
| 10   |       | `1000` | `a4` registered in the iteration unit |
| 11   |       | `0001` | `quo_int`, `quo_fra`, `sign_out` show the new quotient |

So the latency is 11 cycles. The published on-board figure for this is 99.1 ns at
about 111 MHz.

**Protocol.** There is no valid/ready handshake. A division starts when either
operand changes. The iteration trigger compares the operands with a copy delayed by
one clock, and the registered compare is `start`. Hold the operands steady until the
result appears, 11 edges after the one that first samples them. The outputs keep the
last quotient until the next division completes. Consequences:

- Applying the same operands twice does not start a second division.
- Changing operands during a division is ignored. The controller only looks at
  `start` in `idle`, and by then the pulse is gone.
- A zero divisor gives an undefined result.
- `rst` is synchronous and active-high.

## Blocks and files

| file (`rtl/`) | block |
|---|---|
| `gs_pkg.sv` | state enum, enable codes, leading-zero search, internal width |
| `gs_divider.sv` | top level, wiring of the blocks below |
| `iteration_trigger.sv` | operand change detector → `start` |
| `fsm_controller.sv` | the ten-state sequencer → `en[3:0]`; asserts `en` is always a legal code |
| `input_sign_converter.sv` | magnitudes and quotient sign, registered on `en[0]` |
| `normalization_shifter.sv` | divisor into `[0.5, 1)`, dividend aligned (combinational) |
| `data_register.sv` | operand register; selects `*_fix` or `*_out` by `en` |
| `goldschmidt_iteration_unit.sv` | `m = 2 - b`, two multipliers, result registers on `en[2]` |
| `mitchell_multiplier.sv` | corrected Mitchell multiplier (primary multiplier) |
| `mitchell_correction.sv` | correction multiplier (plain Mitchell on fractions) |
| `aux_shifter.sv` | leading-one position of two operands |
| `output_sign_converter.sv` | two's complement and split, registered on `en[3]` |

## Accuracy and verification

Each file in `tb/` is a self-checking testbench that prints
`TB_RESULT checks=N failures=M`. `tb/mitchell_ref_pkg.sv` is a reference model of the
corrected Mitchell product written in `real` arithmetic, following the equations
rather than the hardware.

- **`tb_gs_divider`** (default sizes) runs several checks:
  - The eight published calculation examples. All eight reproduce the published
    computed quotients to four decimals:

    | division | result |
    |---|---|
    | −17/35 | −0.4868 |
    | 53/11 | 4.8253 |
    | 345/4252 | 0.0812 |
    | 2741/67 | 40.9342 |
    | 34242/5567 | 6.1759 |
    | 89230293/432424 | 206.7367 |
    | (2^31−1)/947483647 | 2.2685 |
    | (2^31−1)/−47483647 | −45.4989 |

  - For 53/11, the normalized operands, every coefficient and every intermediate
    `a_s`, `b_s` are compared clock by clock with the published waveform, e.g.
    `a4 = 0x4_D34D30F0`, `b4 = 0x0_FFFFFF30`. The enable sequence is checked too.
  - 300 random signed divisions: the error is at most 1 % + 2^-32, the sign is right,
    and the output changes exactly at edge 11.
  - An operand change during a division is ignored.
  - It counts that negative quotients, quotients below one, both correction branches,
    and multiplier operands above and below one all occur.
- **`tb_gs_divider_widths`** instantiates a 16-bit/16.16 divider and a
  24-bit ÷ 12-bit divider with a 24.20 output. It checks random divisions to 1 % plus
  a few units of the internal fraction. With a short fraction, tiny quotients lose
  relative accuracy: each of the four iterations truncates.
- **`tb_mitchell_multiplier`** and **`tb_mitchell_correction`** are bit-exact against
  the reference model. They also check the error bounds: never above the exact
  product, at most 3 % below for the corrected product and 1/9 below for the plain
  one.
- The other block testbenches check each block against values computed in the
  testbench.

## Where this RTL departs or chooses

Points where the published description is silent, ambiguous or self-contradictory,
and what this RTL does:

- **Internal integer width.** The internal words use `max(width)+1` integer bits,
  not `width_dividend` bits. This matches the 64-bit internal buses of the published
  on-board build and holds `|-2^31|`. The `*_unsigned` magnitudes are 32 bits here;
  the published waveform shows them zero-extended to 64.
- **Leading-zero count.** The normalization and auxiliary shifter formulas only put
  the divisor in `[0.5, 1)` and give the right `k` if `shift_length_R` means "leading
  zeros plus one". The RTL uses that reading, and the published waveform values
  confirm it.
- **Which branch uses `1 - x`.** The published flow chart labels the branches of the
  `xN + xM >= 1` test the other way round from the equations. The RTL follows the
  equations, which are the mathematically correct error terms and reproduce the
  published numbers. Taken literally, the chart's labels give quotients
  that miss the 1 % bound for many operands.
- **Registers.** The text calls the input and output sign converters combinational,
  but also says they are enabled by `en[0]` and `en[3]`. The waveform shows the
  magnitudes updating one clock after the trigger. Both converters are therefore
  registers with those enables. The controller's `en` is a registered output: each
  state's code appears in the cycle after the state. `start` is registered. These
  choices reproduce the published enable sequence and the 11-cycle latency exactly.
  The published block diagram does draw clock and reset into the input converter,
  but draws neither into the output converter. A purely combinational output
  converter would show the quotient one cycle earlier, at edge 10. It would also
  show the intermediate results while the divider iterates.
- **Enables without a register.** `en[1]` gates no register. The coefficient is
  combinational from the data register, as the published waveform shows.
- **Iteration trigger.** The "two cascaded D flip-flops" of the trigger are one
  flip-flop stage per operand.
- **Corner cases.** A zero multiplier operand gives zero; a zero fraction in the
  correction gives `C = 0`. The flow chart has no branch for either. `sign_out` is 0
  for a zero quotient.
- **Not modelled.** The FPGA-specific parts of the published build are not part of
  this RTL: virtual I/O cores, clocking, and the resource and power figures.

## Simulating and changing it

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/gs_pkg.sv tb/mitchell_ref_pkg.sv tb/tb_gs_divider.sv --top-module tb_gs_divider
    ./obj_dir/Vtb_gs_divider

Replace `tb_gs_divider` with any other testbench name. Every testbench runs in well
under a second.

The widths are parameters of `gs_divider`: `WIDTH_DIVIDEND`, `WIDTH_DIVISOR`,
`EXTENSION`, `WIDTH_QUO`, `WIDTH_FRA`. The internal word is
`max(WIDTH_DIVIDEND, WIDTH_DIVISOR) + 1 + EXTENSION` bits wide.

- `EXTENSION` must be at least the internal integer width. The normalization
  shifter stops elaboration otherwise.
- Fewer fraction bits make tiny quotients coarser.
- The leading-one search is written for words up to 256 bits (`gs_pkg::MAXW`).

The iteration count is four, fixed by the state sequence. To change it, add or remove
`iterK_1`/`iterK_2` pairs in `fsm_controller`; nothing else depends on it.
