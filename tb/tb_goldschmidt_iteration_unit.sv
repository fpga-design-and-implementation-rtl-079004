// tb_goldschmidt_iteration_unit: runs the published 53/11 iterations through the
// iteration unit (coefficient 2 - b, both products registered on en2) and checks each
// result; then random operand pairs against the reference multiplier, and that the
// outputs hold while en2 is low.
module tb_goldschmidt_iteration_unit;
  logic        clk = 1'b0, rst, en2;
  logic [63:0] dividend_in, divisor_in, dividend_out, divisor_out;
  int          checks = 0, failures = 0;

  goldschmidt_iteration_unit dut (.*);
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [63:0] a [5] = '{64'h0000000350000000, 64'h0000000454000000, 64'h00000004c3c00000,
                           64'h00000004d30f0000, 64'h00000004d34d30f0};
    logic [63:0] b [5] = '{64'h00000000b0000000, 64'h00000000e6000000, 64'h00000000fcc00000,
                           64'h00000000fff30000, 64'h00000000ffffff30};
    logic [63:0] ha, hb;
    real ra, rb, rm;
    rst = 1'b1; en2 = 1'b0; dividend_in = '0; divisor_in = '0;
    @(posedge clk); #1;
    check(dividend_out == 0 && divisor_out == 0, "reset");
    rst = 1'b0;
    dividend_in = a[0]; divisor_in = b[0];
    for (int it = 0; it < 4; it++) begin
      en2 = 1'b0;
      @(posedge clk); #1;                      // coefficient step: outputs hold
      if (it > 0) check(dividend_out == a[it] && divisor_out == b[it], "hold while en2 low");
      en2 = 1'b1;
      @(posedge clk); #1;                      // multiply step
      check(dividend_out == a[it+1] && divisor_out == b[it+1],
            $sformatf("iteration %0d: %h %h", it + 1, dividend_out, divisor_out));
      dividend_in = dividend_out; divisor_in = divisor_out;
    end
    for (int i = 0; i < 500; i++) begin
      dividend_in = {32'h0, $urandom} << $urandom_range(0, 20);
      divisor_in  = {32'h0, 1'b1, 31'($urandom)};          // in [0.5, 1)
      en2 = $urandom_range(0, 1);
      ha = dividend_out; hb = divisor_out;
      @(posedge clk); #1;
      ra = real'(dividend_in) / 2.0**32;
      rb = real'(divisor_in) / 2.0**32;
      rm = 2.0 - rb;
      if (en2)
        check(real'(dividend_out) == mitchell_ref_pkg::product(ra, rm, 32) * 2.0**32 &&
              real'(divisor_out)  == mitchell_ref_pkg::product(rb, rm, 32) * 2.0**32,
              $sformatf("random step %0d", i));
      else
        check(dividend_out == ha && divisor_out == hb, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
