// input_sign_converter: magnitudes and quotient sign of the two signed operands.
//
// dividend and divisor are two's complement words of WIDTH+1 bits (a sign bit over
// WIDTH magnitude bits). The block outputs |dividend| and |divisor| as unsigned
// IW-bit integers, IW = max(WIDTH_DIVIDEND, WIDTH_DIVISOR)+1 so that the magnitude
// of the most negative value fits, and sign = dividend[MSB] ^ divisor[MSB].
// The magnitudes sit in the low bits of the field; the normalization shifter reads the
// field as an IW.EXTENSION fixed-point number, which scales both operands alike.
//
// Timing: the outputs are registered and load on every rising clk edge while en0
// (en[0]) is high, i.e. while the controller waits for data and in the first cycle
// after new data arrives; they hold during a division. The register follows the
// enable description of the design; the algorithm (absolute value, XOR of signs) is
// the published one. rst is synchronous and active-high and clears the outputs.
module input_sign_converter #(
  parameter int WIDTH_DIVIDEND = 31,
  parameter int WIDTH_DIVISOR  = 31,
  localparam int IW = gs_pkg::int_width(WIDTH_DIVIDEND, WIDTH_DIVISOR)
) (
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      en0,
  input  logic [WIDTH_DIVIDEND:0]   dividend,
  input  logic [WIDTH_DIVISOR:0]    divisor,
  output logic [IW-1:0]             dividend_unsigned,
  output logic [IW-1:0]             divisor_unsigned,
  output logic                      sign
);

  logic signed [IW-1:0] dividend_ext, divisor_ext;
  logic [IW-1:0]        dividend_abs, divisor_abs;

  always_comb begin
    dividend_ext = IW'($signed(dividend));
    divisor_ext  = IW'($signed(divisor));
    dividend_abs = dividend[WIDTH_DIVIDEND] ? IW'(-dividend_ext) : IW'(dividend_ext);
    divisor_abs  = divisor[WIDTH_DIVISOR]   ? IW'(-divisor_ext)  : IW'(divisor_ext);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      dividend_unsigned <= '0;
      divisor_unsigned  <= '0;
      sign              <= 1'b0;
    end else if (en0) begin
      dividend_unsigned <= dividend_abs;
      divisor_unsigned  <= divisor_abs;
      sign              <= dividend[WIDTH_DIVIDEND] ^ divisor[WIDTH_DIVISOR];
    end
  end

endmodule
