// tb_mitchell_multiplier: checks the corrected Mitchell multiplier on 64-bit fixed-point
// operands (32 fraction bits): the published 53/11 iteration products exactly, random
// operands bit for bit against the real-number reference model, and the error bound
// (never above the exact product, at most about 3 % below it). Counts both correction
// branches and operands below and above one.
module tb_mitchell_multiplier;
  logic [63:0] n, m, nm;
  int          checks = 0, failures = 0;
  int          n_carry = 0, n_nocarry = 0, n_lt1 = 0, n_ge1 = 0;

  mitchell_multiplier dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pair(input logic [63:0] a, input logic [63:0] b, input logic [63:0] expected);
    n = a; m = b; #1;
    check(nm == expected, $sformatf("%h * %h -> %h, expected %h", a, b, nm, expected));
  endtask

  initial begin
    real rn, rm, rp, ex;
    // a1 = m1 a0, b1 = m1 b0, a2 = m2 a1 of the published 53/11 waveform
    pair(64'h0000000350000000, 64'h0000000150000000, 64'h0000000454000000);
    pair(64'h00000000b0000000, 64'h0000000150000000, 64'h00000000e6000000);
    pair(64'h0000000454000000, 64'h000000011a000000, 64'h00000004c3c00000);
    pair(64'h00000000e6000000, 64'h000000011a000000, 64'h00000000fcc00000);
    pair(64'h00000004d30f0000, 64'h00000001000d0000, 64'h00000004d34d30f0);
    pair(64'h00000000fff30000, 64'h00000001000d0000, 64'h00000000ffffff30);
    pair(64'h0, 64'h0000000150000000, 64'h0);
    for (int i = 0; i < 3000; i++) begin
      n = {22'h0, $urandom_range(0, 1023), $urandom} >> $urandom_range(0, 41);
      m = {22'h0, $urandom_range(0, 1023), $urandom} >> $urandom_range(0, 41);
      #1;
      rn = real'(n) / 2.0**32;
      rm = real'(m) / 2.0**32;
      rp = mitchell_ref_pkg::product(rn, rm, 32);
      check(real'(nm) == rp * 2.0**32, $sformatf("%h*%h -> %h, expected %f", n, m, nm, rp * 2.0**32));
      ex = rn * rm;
      check(rp <= ex && rp >= ex * 0.97 - 2.0**-31, $sformatf("%h*%h error bound", n, m));
      if (n != 0 && m != 0) begin
        if (dut.carry) n_carry++; else n_nocarry++;
        if (dut.n_ge1) n_ge1++; else n_lt1++;
      end
    end
    check(n_carry > 0 && n_nocarry > 0 && n_lt1 > 0 && n_ge1 > 0, "all branches exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
