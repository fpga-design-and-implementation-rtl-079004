// tb_mitchell_correction: checks the correction multiplier (plain Mitchell product of
// two 32-bit fractions) bit for bit against the real-number reference model, plus two
// products worked out by hand from the published 53/11 example.
module tb_mitchell_correction;
  logic [31:0] xa, xb, c;
  int          checks = 0, failures = 0;
  int          n_carry = 0;

  mitchell_correction dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    real ra, rb, rc, ex;
    // 0.65625 * 0.3125 -> 0.1953125 and 0.375 * 0.3125 -> 0.109375
    xa = 32'ha800_0000; xb = 32'h5000_0000; #1;
    check(c == 32'h3200_0000, $sformatf("0.65625*0.3125 -> %h", c));
    xa = 32'h6000_0000; #1;
    check(c == 32'h1c00_0000, $sformatf("0.375*0.3125 -> %h", c));
    xa = 0; xb = 32'h8000_0000; #1;
    check(c == 0, "zero operand");
    for (int i = 0; i < 2000; i++) begin
      xa = $urandom >> $urandom_range(0, 31);
      xb = $urandom >> $urandom_range(0, 31);
      #1;
      ra = real'(xa) / 2.0**32;
      rb = real'(xb) / 2.0**32;
      rc = mitchell_ref_pkg::correction(ra, rb, 32);
      check(real'(c) == rc * 2.0**32, $sformatf("%h*%h -> %h, expected %f", xa, xb, c, rc * 2.0**32));
      ex = ra * rb;
      check(rc <= ex && rc >= ex * (1.0 - 1.0/9.0) - 2.0**-31, "within the plain Mitchell error");
      if (xa != 0 && xb != 0 && dut.k_c) n_carry++;
    end
    check(n_carry > 0, "sum >= 1 branch exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
