// iteration_trigger: detects a new pair of operands and starts a division.
//
// Each operand passes through one D flip-flop stage (dividend_1, divisor_1). On every
// rising clk edge start is registered as 1 if either operand differs from its delayed
// copy and 0 otherwise, so a change of operands yields a one-cycle start pulse in the
// cycle after the edge that first captured the new values. The compare-with-delayed-
// copy scheme is the published one; registering start (rather than decoding it
// combinationally) is this design's choice, made so that the whole divider takes 11
// clock cycles from that edge to the quotient. rst (synchronous, active-high) clears
// the delayed copies, so the first non-zero operands after reset also trigger.
module iteration_trigger #(
  parameter int WIDTH_DIVIDEND = 31,
  parameter int WIDTH_DIVISOR  = 31
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic [WIDTH_DIVIDEND:0] dividend,
  input  logic [WIDTH_DIVISOR:0]  divisor,
  output logic                    start
);

  logic [WIDTH_DIVIDEND:0] dividend_1;
  logic [WIDTH_DIVISOR:0]  divisor_1;

  always_ff @(posedge clk) begin
    if (rst) begin
      dividend_1 <= '0;
      divisor_1  <= '0;
      start      <= 1'b0;
    end else begin
      dividend_1 <= dividend;
      divisor_1  <= divisor;
      start      <= (dividend != dividend_1) || (divisor != divisor_1);
    end
  end

endmodule
