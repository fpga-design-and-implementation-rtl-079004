// mitchell_multiplier: logarithmic (Mitchell) multiplier with one correction term.
//
// Operands n, m and product nm are unsigned fixed-point words of DW bits with
// EXTENSION fraction bits. Each operand is written as 2^k (1 + x), x in [0, 1):
//   operand >= 1 : k = shift_length - EXTENSION - 1, x = (op >> k) - 1, sub = 0
//   operand <  1 : sub = EXTENSION - shift_length + 1, x = (op << sub) - 1, k = 0
// where shift_length (leading-one index + 1) comes from an auxiliary shifter. Then
//   x_N + x_M < 1 : NM ~ 2^(kN+kM) (1 + x_N + x_M)        + 2^(kN+kM) x_N  x_M
//   x_N + x_M >= 1: NM ~ 2^(kN+kM+1) (x_N + x_M)          + 2^(kN+kM) x_N' x_M'
// with x' = 1 - x. The first term is the plain Mitchell product, written as
// (1 + x_NM) << k_NM with k_NM/x_NM the integer/fraction of kN+kM+x_N+x_M; the
// second term, C, is the exact error of that product, itself approximated by the
// correction multiplier (plain Mitchell). Finally the sum is shifted right by
// sub_N + sub_M. The result is within about 3 % of the exact product and never above it.
//
// This follows the published algorithm and its equations; where the flow chart and the
// equations differ on which branch uses x' (the chart's labels are swapped), the
// equations are followed. Design choices: bits shifted out are dropped (truncation),
// a product beyond DW bits wraps, and a zero operand yields zero. Purely combinational.
module mitchell_multiplier #(
  parameter int EXTENSION = 32,
  parameter int DW        = 64,
  localparam int SLW = $clog2(DW + 1),
  localparam int WW  = DW + EXTENSION + 4
) (
  input  logic [DW-1:0] n,
  input  logic [DW-1:0] m,
  output logic [DW-1:0] nm
);

  logic [SLW-1:0]       sl_n, sl_m;
  logic                 n_ge1, m_ge1;
  int                   k_n, k_m, sub_n, sub_m, e;
  logic [EXTENSION-1:0] x_n, x_m, xa, xb, c;
  logic [EXTENSION:0]   sum_x, one;
  logic                 carry;
  logic [WW-1:0]        mant;

  aux_shifter #(.WIDTH(DW)) u_aux (
    .num1(n), .num2(m), .shift_length_num1(sl_n), .shift_length_num2(sl_m)
  );

  mitchell_correction #(.EXTENSION(EXTENSION)) u_corr (
    .xa(xa), .xb(xb), .c(c)
  );

  always_comb begin
    one   = (EXTENSION + 1)'(1) << EXTENSION;
    n_ge1 = int'(sl_n) > EXTENSION;
    m_ge1 = int'(sl_m) > EXTENSION;
    k_n   = n_ge1 ? int'(sl_n) - EXTENSION - 1 : 0;
    k_m   = m_ge1 ? int'(sl_m) - EXTENSION - 1 : 0;
    sub_n = n_ge1 ? 0 : EXTENSION - int'(sl_n) + 1;
    sub_m = m_ge1 ? 0 : EXTENSION - int'(sl_m) + 1;
    x_n   = n_ge1 ? EXTENSION'(n >> k_n) : EXTENSION'(n << sub_n);
    x_m   = m_ge1 ? EXTENSION'(m >> k_m) : EXTENSION'(m << sub_m);
    sum_x = (EXTENSION + 1)'(x_n) + (EXTENSION + 1)'(x_m);
    carry = sum_x[EXTENSION];
    // operands of the correction term: x or 1 - x
    xa    = carry ? EXTENSION'(one - (EXTENSION + 1)'(x_n)) : x_n;
    xb    = carry ? EXTENSION'(one - (EXTENSION + 1)'(x_m)) : x_m;
    // (1 + x_NM) << (k_NM - kN - kM), plus C; both weighted 2^(kN+kM)
    mant  = (WW'({1'b1, sum_x[EXTENSION-1:0]}) << carry) + WW'(c);
    e     = k_n + k_m - sub_n - sub_m;
    if (n == '0 || m == '0) nm = '0;
    else if (e >= 0)        nm = DW'(mant << e);
    else                    nm = DW'(mant >> (-e));
  end

endmodule
