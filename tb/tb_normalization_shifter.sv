// tb_normalization_shifter: checks that the divisor is moved into [0.5, 1) (leading one
// at bit 31 of the 64-bit fixed-point word) and the dividend by the same shift, using a
// shift found here by a plain search for the divisor's leading one.
module tb_normalization_shifter;
  logic [31:0] dividend_unsigned, divisor_unsigned;
  logic [63:0] dividend_fix, divisor_fix;
  int          checks = 0, failures = 0;

  normalization_shifter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int msb, sh;
    dividend_unsigned = 32'd53; divisor_unsigned = 32'd11;
    #1;
    check(dividend_fix == 64'h0000000350000000 && divisor_fix == 64'h00000000b0000000, "53/11 example");
    for (int i = 0; i < 1000; i++) begin
      dividend_unsigned = $urandom >> $urandom_range(0, 31);
      divisor_unsigned  = ($urandom >> $urandom_range(0, 31)) | 32'h1;
      if (i == 0) divisor_unsigned = 32'h8000_0000;
      if (i == 1) divisor_unsigned = 32'h1;
      #1;
      msb = 0;
      for (int b = 0; b < 32; b++) if (divisor_unsigned[b]) msb = b;
      sh = 31 - msb;
      check(divisor_fix == (64'(divisor_unsigned) << sh), $sformatf("divisor %h -> %h", divisor_unsigned, divisor_fix));
      check(dividend_fix == (64'(dividend_unsigned) << sh), $sformatf("dividend %h -> %h", dividend_unsigned, dividend_fix));
      check(divisor_fix[63:32] == 0 && divisor_fix[31], "divisor_fix in [0.5,1)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
