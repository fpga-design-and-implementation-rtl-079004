// data_register: the operand register in front of the Goldschmidt iteration unit.
//
// On each rising clk edge, for dividend and divisor alike:
//   en = 0001, 0000 or 0011 : *_in <= *_fix  (normalized operands, a0 and b0)
//   en = 0010 or 1000       : *_in <= *_out  (result of the previous iteration)
//   any other en            : *_in holds
// These decisions are the published ones. Because the iteration unit feeds back through
// this register, one adder and two multipliers serve all four iterations. rst
// (synchronous, active-high) clears both words.
module data_register #(
  parameter int DW = 64
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [3:0]    en,
  input  logic [DW-1:0] dividend_fix,
  input  logic [DW-1:0] divisor_fix,
  input  logic [DW-1:0] dividend_out,
  input  logic [DW-1:0] divisor_out,
  output logic [DW-1:0] dividend_in,
  output logic [DW-1:0] divisor_in
);
  import gs_pkg::*;

  always_ff @(posedge clk) begin
    if (rst) begin
      dividend_in <= '0;
      divisor_in  <= '0;
    end else if (en == EN_WAIT || en == EN_START || en == EN_ADD1) begin
      dividend_in <= dividend_fix;
      divisor_in  <= divisor_fix;
    end else if (en == EN_ADD || en == EN_OUT) begin
      dividend_in <= dividend_out;
      divisor_in  <= divisor_out;
    end
  end

endmodule
