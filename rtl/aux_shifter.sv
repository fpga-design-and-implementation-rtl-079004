// aux_shifter: leading-one position of the two operands of a Mitchell multiplier.
//
// For each of num1 and num2 it runs the same MSB-first scan as the normalization
// shifter (shift_length_num_R = leading zeros + 1) and returns
//   shift_length_num = WIDTH - shift_length_num_R + 1,
// the index of the leading one plus one (0 for a zero operand). WIDTH is the whole
// operand width, integer plus fraction bits. The multiplier derives from it the
// characteristic k = shift_length - EXTENSION - 1 of an operand >= 1 and the
// pre-shift sub = EXTENSION - shift_length + 1 of an operand < 1. The formula is the
// published one. Purely combinational.
module aux_shifter #(
  parameter int WIDTH = 64,
  localparam int SLW = $clog2(WIDTH + 1)
) (
  input  logic [WIDTH-1:0] num1,
  input  logic [WIDTH-1:0] num2,
  output logic [SLW-1:0]   shift_length_num1,
  output logic [SLW-1:0]   shift_length_num2
);

  int r1, r2;

  always_comb begin
    r1 = gs_pkg::shift_length_r(gs_pkg::MAXW'(num1), WIDTH);
    r2 = gs_pkg::shift_length_r(gs_pkg::MAXW'(num2), WIDTH);
    shift_length_num1 = SLW'(WIDTH - r1 + 1);
    shift_length_num2 = SLW'(WIDTH - r2 + 1);
  end

endmodule
