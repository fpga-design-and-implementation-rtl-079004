// mitchell_correction: the correction multiplier of a Mitchell multiplier unit.
//
// Multiplies two fractions xa, xb in [0, 1) (EXTENSION bits, weight 2^-EXTENSION) with
// the plain Mitchell approximation. Both operands are below one, so only the left
// pre-shift is needed: an auxiliary shifter gives each operand's leading-one position,
// sub = EXTENSION - shift_length + 1 moves it into [1, 2), and x = (x << sub) - 1 is
// its mantissa fraction. With sum = x_a' + x_b', k_C its integer bit and x_C its
// fraction,
//   C = [(1 + x_C) << k_C] >> (sub_a + sub_b).
// This is the published correction step. Bits shifted out are dropped, and a zero
// operand gives C = 0 (the Mitchell logarithm has no value for zero). Purely
// combinational; C < 1 always fits in EXTENSION bits.
module mitchell_correction #(
  parameter int EXTENSION = 32,
  localparam int SLW = $clog2(EXTENSION + 1)
) (
  input  logic [EXTENSION-1:0] xa,
  input  logic [EXTENSION-1:0] xb,
  output logic [EXTENSION-1:0] c
);

  logic [SLW-1:0]       sl_a, sl_b;
  logic [SLW:0]         sub_a, sub_b;
  logic [EXTENSION-1:0] xa_sh, xb_sh;
  logic [EXTENSION:0]   sum_c;
  logic                 k_c;
  logic [EXTENSION+1:0] mant;

  aux_shifter #(.WIDTH(EXTENSION)) u_aux (
    .num1(xa), .num2(xb), .shift_length_num1(sl_a), .shift_length_num2(sl_b)
  );

  always_comb begin
    sub_a = (SLW + 1)'(EXTENSION) - (SLW + 1)'(sl_a) + 1'b1;
    sub_b = (SLW + 1)'(EXTENSION) - (SLW + 1)'(sl_b) + 1'b1;
    xa_sh = EXTENSION'(xa << sub_a);   // (x << sub) - 1: the leading one falls off
    xb_sh = EXTENSION'(xb << sub_b);
    sum_c = (EXTENSION + 1)'(xa_sh) + (EXTENSION + 1)'(xb_sh);
    k_c   = sum_c[EXTENSION];
    mant  = (EXTENSION + 2)'({1'b1, sum_c[EXTENSION-1:0]}) << k_c;
    if (xa == '0 || xb == '0) c = '0;
    else                      c = EXTENSION'(mant >> (sub_a + sub_b));
  end

endmodule
