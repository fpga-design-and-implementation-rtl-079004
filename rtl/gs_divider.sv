// gs_divider: signed fixed-point divider, Goldschmidt iteration with Mitchell
// multipliers (top level).
//
// Computes quotient = dividend / divisor for two's complement operands of
// WIDTH_DIVIDEND+1 and WIDTH_DIVISOR+1 bits. The quotient comes out as a signed fixed
// point number {sign_out, quo_int, quo_fra} with WIDTH_QUO integer and WIDTH_FRA-1
// fraction bits, accurate to about 1 % (four Goldschmidt iterations, each product
// approximated by a corrected Mitchell multiplier).
//
// Data path: iteration trigger -> FSM controller -> en[3:0]; input sign converter
// (magnitudes, sign) -> normalization shifter (divisor into [0.5,1)) -> data register
// -> Goldschmidt iteration unit (m = 2 - b, a *= m, b *= m), fed back through the data
// register four times -> output sign converter. The block partition and wiring follow
// the published architecture.
//
// Protocol: apply new operands and hold them. The edge that first samples them raises
// start; 11 rising edges after that one the outputs show the new quotient and keep it
// until the next division completes. Operand changes during a division are not seen
// until the operands change again. A zero divisor gives an undefined result. rst is
// synchronous and active-high.
module gs_divider #(
  parameter int WIDTH_DIVIDEND = 31,
  parameter int WIDTH_DIVISOR  = 31,
  parameter int EXTENSION      = 32,
  parameter int WIDTH_QUO      = 32,
  parameter int WIDTH_FRA      = 33,
  localparam int IW = gs_pkg::int_width(WIDTH_DIVIDEND, WIDTH_DIVISOR),
  localparam int DW = IW + EXTENSION
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [WIDTH_DIVIDEND:0] dividend,
  input  logic [WIDTH_DIVISOR:0]  divisor,
  output logic [WIDTH_QUO-1:0]    quo_int,
  output logic [WIDTH_FRA-2:0]    quo_fra,
  output logic                    sign_out
);

  logic          start;
  logic [3:0]    en;
  logic          sign;
  logic [IW-1:0] dividend_unsigned, divisor_unsigned;
  logic [DW-1:0] dividend_fix, divisor_fix;
  logic [DW-1:0] dividend_in, divisor_in;
  logic [DW-1:0] dividend_out, divisor_out;

  iteration_trigger #(.WIDTH_DIVIDEND(WIDTH_DIVIDEND), .WIDTH_DIVISOR(WIDTH_DIVISOR)) u_trigger (
    .clk, .rst, .dividend, .divisor, .start
  );

  fsm_controller u_fsm (.clk, .rst, .start, .en);

  input_sign_converter #(.WIDTH_DIVIDEND(WIDTH_DIVIDEND), .WIDTH_DIVISOR(WIDTH_DIVISOR)) u_in_sign (
    .clk, .rst, .en0(en[0]), .dividend, .divisor,
    .dividend_unsigned, .divisor_unsigned, .sign
  );

  normalization_shifter #(
    .WIDTH_DIVIDEND(WIDTH_DIVIDEND), .WIDTH_DIVISOR(WIDTH_DIVISOR), .EXTENSION(EXTENSION)
  ) u_norm (
    .dividend_unsigned, .divisor_unsigned, .dividend_fix, .divisor_fix
  );

  data_register #(.DW(DW)) u_data_reg (
    .clk, .rst, .en, .dividend_fix, .divisor_fix, .dividend_out, .divisor_out,
    .dividend_in, .divisor_in
  );

  goldschmidt_iteration_unit #(.EXTENSION(EXTENSION), .DW(DW)) u_iter (
    .clk, .rst, .en2(en[2]), .dividend_in, .divisor_in, .dividend_out, .divisor_out
  );

  output_sign_converter #(
    .EXTENSION(EXTENSION), .DW(DW), .WIDTH_QUO(WIDTH_QUO), .WIDTH_FRA(WIDTH_FRA)
  ) u_out_sign (
    .clk, .rst, .en3(en[3]), .sign, .dividend_out, .quo_int, .quo_fra, .sign_out
  );

endmodule
