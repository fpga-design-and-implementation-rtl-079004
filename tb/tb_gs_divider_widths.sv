// tb_gs_divider_widths: the divider at two other operand/quotient widths, to exercise
// the parameterization.
//   A: 16-bit operands, 16 fraction bits internally, 16.16 quotient.
//   B: 24-bit dividend, 12-bit divisor, 24 fraction bits internally, 24-bit integer and
//      20-bit fraction quotient (the quotient fraction is truncated from 24 bits).
// Random signed operands; each quotient must be within 1 % of the exact one plus one
// absolute slack of a few units of the internal fraction (each of the four iterations
// truncates its products), with the 11-cycle latency.
module tb_gs_divider_widths;
  logic        clk = 1'b0, rst;
  logic [15:0] a_dividend, a_divisor;
  logic [15:0] a_quo_int, a_quo_fra;
  logic        a_sign;
  logic [23:0] b_dividend, b_quo_int;
  logic [11:0] b_divisor;
  logic [19:0] b_quo_fra;
  logic        b_sign;
  int          checks = 0, failures = 0;

  gs_divider #(.WIDTH_DIVIDEND(15), .WIDTH_DIVISOR(15), .EXTENSION(16),
               .WIDTH_QUO(16), .WIDTH_FRA(17)) dut_a (
    .clk, .rst, .dividend(a_dividend), .divisor(a_divisor),
    .quo_int(a_quo_int), .quo_fra(a_quo_fra), .sign_out(a_sign)
  );

  gs_divider #(.WIDTH_DIVIDEND(23), .WIDTH_DIVISOR(11), .EXTENSION(24),
               .WIDTH_QUO(24), .WIDTH_FRA(21)) dut_b (
    .clk, .rst, .dividend(b_dividend), .divisor(b_divisor),
    .quo_int(b_quo_int), .quo_fra(b_quo_fra), .sign_out(b_sign)
  );

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic bit close(input real q, input real r, input real ulp);
    real tol = 0.01 * (r < 0 ? -r : r) + ulp;
    return (q - r) <= tol && (r - q) <= tol;
  endfunction

  initial begin
    int  a1, a2, b1, b2;
    real qa, qb, ra, rb;
    rst = 1'b1;
    a_dividend = '0; a_divisor = '0; b_dividend = '0; b_divisor = '0;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 200; i++) begin
      a1 = $signed(16'($urandom)) >>> $urandom_range(0, 14);
      a2 = $signed(16'($urandom)) >>> $urandom_range(0, 14);
      b1 = $signed(24'($urandom)) >>> $urandom_range(0, 22);
      b2 = $signed(12'($urandom)) >>> $urandom_range(0, 10);
      if (a2 == 0) a2 = -1;
      if (b2 == 0) b2 = 7;
      if (a1 == 0) a1 = 3;
      if (b1 == 0) b1 = -9;
      @(negedge clk);
      a_dividend = 16'(a1); a_divisor = 16'(a2);
      b_dividend = 24'(b1); b_divisor = 12'(b2);
      @(posedge clk);                                // edge 0
      repeat (10) @(posedge clk);
      @(posedge clk); #1;                            // edge 11
      qa = real'($signed({a_sign, a_quo_int, a_quo_fra})) / 2.0**16;
      qb = real'($signed({b_sign, b_quo_int, b_quo_fra})) / 2.0**20;
      ra = real'(a1) / real'(a2);
      rb = real'(b1) / real'(b2);
      check(close(qa, ra, 8.0 * 2.0**-16), $sformatf("A: %0d/%0d = %f, exact %f", a1, a2, qa, ra));
      check(close(qb, rb, 8.0 * 2.0**-24 + 2.0**-20), $sformatf("B: %0d/%0d = %f, exact %f", b1, b2, qb, rb));
      check(dut_a.en == 4'b0001 && dut_b.en == 4'b0001, "both back in idle after 11 cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
