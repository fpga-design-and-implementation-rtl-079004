// goldschmidt_iteration_unit: one Goldschmidt step, reused for all four iterations.
//
// From the operand register it takes dividend_in (a_{s-1}) and divisor_in (b_{s-1}),
// both unsigned fixed point with EXTENSION fraction bits, forms the iteration
// coefficient m_s = 2 - b_{s-1} with one subtractor, and multiplies both operands by it
// with two Mitchell multipliers in parallel:
//   a_s = m_s a_{s-1},   b_s = m_s b_{s-1}.
// As b approaches 1, a approaches the quotient. This structure (one adder, two
// multipliers) is the published one.
//
// Timing: coefficient and products are combinational; dividend_out/divisor_out are
// registers loaded on the rising clk edge while en2 (en[2]) is high, which is the
// multiply step of each iteration, and hold otherwise. rst (synchronous, active-high)
// clears them.
module goldschmidt_iteration_unit #(
  parameter int EXTENSION = 32,
  parameter int DW        = 64
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          en2,
  input  logic [DW-1:0] dividend_in,
  input  logic [DW-1:0] divisor_in,
  output logic [DW-1:0] dividend_out,
  output logic [DW-1:0] divisor_out
);

  logic [DW-1:0] coe, two;
  logic [DW-1:0] dividend_prod, divisor_prod;

  always_comb begin
    two = DW'(2) << EXTENSION;
    coe = two - divisor_in;
  end

  mitchell_multiplier #(.EXTENSION(EXTENSION), .DW(DW)) u_mul_dividend (
    .n(dividend_in), .m(coe), .nm(dividend_prod)
  );

  mitchell_multiplier #(.EXTENSION(EXTENSION), .DW(DW)) u_mul_divisor (
    .n(divisor_in), .m(coe), .nm(divisor_prod)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      dividend_out <= '0;
      divisor_out  <= '0;
    end else if (en2) begin
      dividend_out <= dividend_prod;
      divisor_out  <= divisor_prod;
    end
  end

endmodule
