// output_sign_converter: turns the final iteration result into the signed quotient.
//
// dividend_out is the unsigned quotient magnitude in fixed point (DW bits, EXTENSION
// fraction bits). If sign is set it is negated (two's complement). The signed result
// {sign_out, quo_int, quo_fra} is one two's complement number with WIDTH_QUO integer
// bits and WIDTH_FRA-1 fraction bits: quo_int is the integer part (sign-extended or
// truncated to WIDTH_QUO bits), quo_fra the top fraction bits (zero-padded if
// WIDTH_FRA-1 > EXTENSION), and sign_out the sign bit, 0 for a zero quotient. The
// conversion and output split are the published ones.
//
// Timing: the three outputs are registered and load on the rising clk edge while en3
// (en[3], the data-out step) is high, so they show the last quotient until the next one
// is complete. rst (synchronous, active-high) clears them.
module output_sign_converter #(
  parameter int EXTENSION = 32,
  parameter int DW        = 64,
  parameter int WIDTH_QUO = 32,
  parameter int WIDTH_FRA = 33,
  localparam int FW = WIDTH_FRA - 1
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en3,
  input  logic                 sign,
  input  logic [DW-1:0]        dividend_out,
  output logic [WIDTH_QUO-1:0] quo_int,
  output logic [FW-1:0]        quo_fra,
  output logic                 sign_out
);

  logic signed [DW:0]        q;
  logic [WIDTH_QUO-1:0]      q_int;
  logic [FW-1:0]             q_fra;

  always_comb begin
    q        = sign ? -$signed({1'b0, dividend_out}) : $signed({1'b0, dividend_out});
    q_int    = WIDTH_QUO'(q >>> EXTENSION);                      // integer part
    q_fra    = FW'(((DW + FW + 1)'(q) << FW) >> EXTENSION);     // top FW fraction bits
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      quo_int  <= '0;
      quo_fra  <= '0;
      sign_out <= 1'b0;
    end else if (en3) begin
      quo_int  <= q_int;
      quo_fra  <= q_fra;
      sign_out <= q[DW];
    end
  end

endmodule
