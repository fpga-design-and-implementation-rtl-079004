// normalization_shifter: brings the divisor into [0.5, 1) and aligns the dividend.
//
// Inputs are the IW-bit magnitudes from the input sign converter, read as fixed-point
// numbers with EXTENSION fraction bits. The shifter scans divisor_unsigned from its MSB
// (shift_length_R = leading zeros + 1) and shifts both magnitudes left by
//   EXTENSION - IW + shift_length_R - 1,
// which puts the leading one of the divisor at bit EXTENSION-1, i.e. divisor_fix is in
// [0.5, 1). The dividend moves by the same amount so the ratio is unchanged. Outputs
// are IW+EXTENSION bits wide. The scan and the shift formula are the published ones,
// with the field width IW in place of width_divisor. Purely combinational. Needs
// EXTENSION >= IW. A zero divisor gives a meaningless result (division by zero is
// undefined for this divider).
module normalization_shifter #(
  parameter int WIDTH_DIVIDEND = 31,
  parameter int WIDTH_DIVISOR  = 31,
  parameter int EXTENSION      = 32,
  localparam int IW = gs_pkg::int_width(WIDTH_DIVIDEND, WIDTH_DIVISOR),
  localparam int DW = IW + EXTENSION
) (
  input  logic [IW-1:0] dividend_unsigned,
  input  logic [IW-1:0] divisor_unsigned,
  output logic [DW-1:0] dividend_fix,
  output logic [DW-1:0] divisor_fix
);

  if (EXTENSION < IW) begin : g_check
    $error("normalization_shifter: EXTENSION must be at least the integer width");
  end

  int shift_length_r;
  int shift;

  always_comb begin
    shift_length_r = gs_pkg::shift_length_r(gs_pkg::MAXW'(divisor_unsigned), IW);
    shift          = EXTENSION - IW + shift_length_r - 1;
    if (shift_length_r > IW) shift = 0;  // zero divisor
    dividend_fix   = DW'(dividend_unsigned) << shift;
    divisor_fix    = DW'(divisor_unsigned)  << shift;
  end

endmodule
