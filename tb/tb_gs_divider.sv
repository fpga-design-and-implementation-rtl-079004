// tb_gs_divider: end-to-end test of the divider at its default sizes (32-bit signed
// operands, 32 integer + 32 fraction bits of quotient).
//
// For each pair of operands the bench applies them just after a rising edge, holds
// them, and checks that the outputs change exactly 11 rising edges after the first edge
// that samples them. It checks:
//   - the printed calculation examples (expected quotient to 4 decimals);
//   - for 53/11 the internal operand register and iteration results against the
//     published on-board waveform, clock by clock, and the enable sequence;
//   - random operands: relative error below 1 %, and sign of the result;
//   - that every mechanism occurs: negative quotients, quotients below one, the
//     correction branch with x_N + x_M >= 1 and with x_N + x_M < 1, operands < 1 and
//     >= 1 in the multipliers, and a start request arriving during a division (ignored).
module tb_gs_divider;
  logic        clk = 1'b0;
  logic        rst;
  logic [31:0] dividend, divisor;
  logic [31:0] quo_int, quo_fra;
  logic        sign_out;
  int          checks = 0, failures = 0;
  int          n_neg = 0, n_small = 0, n_carry = 0, n_nocarry = 0, n_lt1 = 0, n_ge1 = 0;
  int          n_ignored = 0;

  gs_divider dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters, sampled during multiply steps
  always @(posedge clk) if (!rst && dut.en == 4'b0100) begin
    if (dut.u_iter.u_mul_dividend.carry) n_carry++; else n_nocarry++;
    if (dut.u_iter.u_mul_dividend.n_ge1)  n_ge1++;   else n_lt1++;
  end

  function automatic real quotient_real();
    logic signed [64:0] q;
    q = $signed({sign_out, quo_int, quo_fra});
    return real'(q) / 4294967296.0;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Apply operands, wait for the result, check latency; returns the quotient.
  task automatic divide(input logic [31:0] a, input logic [31:0] b, output real q);
    logic [64:0] prev_q;
    @(negedge clk);
    dividend = a;
    divisor  = b;
    prev_q = {sign_out, quo_int, quo_fra};
    @(posedge clk);                    // edge 0: operands sampled
    repeat (10) begin
      @(posedge clk);
      #1;
    end
    check({sign_out, quo_int, quo_fra} == prev_q, $sformatf("%0d/%0d: output changed before edge 11", $signed(a), $signed(b)));
    @(posedge clk);                    // edge 11
    #1;
    q = quotient_real();
  endtask

  task automatic table_case(input int a, input int b, input real printed);
    real q, ref_q, rel;
    divide(a, b, q);
    ref_q = real'(a) / real'(b);
    rel   = (q - ref_q) / ref_q;
    if (rel < 0) rel = -rel;
    check((q - printed) < 0.00015 && (printed - q) < 0.00015,
          $sformatf("%0d/%0d = %f, published %f", a, b, q, printed));
    check(rel < 0.01, $sformatf("%0d/%0d rel error %f", a, b, rel));
    if (q < 0) n_neg++;
    if (q < 1.0 && q > -1.0) n_small++;
  endtask

  initial begin
    real q, ref_q, rel;
    logic [63:0] exp_a [4], exp_b [4];
    rst = 1'b1;
    dividend = '0;
    divisor  = '0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst = 1'b0;
    repeat (3) @(posedge clk);

    // 53/11 against the on-board waveform, cycle by cycle
    @(negedge clk);
    dividend = 32'd53;
    divisor  = 32'd11;
    @(posedge clk); #1;                         // edge 0
    @(posedge clk); #1;                         // edge 1
    check(dut.en == 4'b0000, "en after edge 1");
    check(dut.dividend_unsigned == 32'h35 && dut.divisor_unsigned == 32'hb, "unsigned operands");
    check(dut.dividend_fix == 64'h0000000350000000 && dut.divisor_fix == 64'h00000000b0000000, "normalized operands");
    @(posedge clk); #1;                         // edge 2
    check(dut.en == 4'b0011, "en after edge 2");
    check(dut.dividend_in == 64'h0000000350000000 && dut.divisor_in == 64'h00000000b0000000, "a0/b0 loaded");
    check(dut.u_iter.coe == 64'h0000000150000000, "coefficient m1");
    exp_a = '{64'h0000000454000000, 64'h00000004c3c00000, 64'h00000004d30f0000, 64'h00000004d34d30f0};
    exp_b = '{64'h00000000e6000000, 64'h00000000fcc00000, 64'h00000000fff30000, 64'h00000000ffffff30};
    for (int it = 0; it < 4; it++) begin
      @(posedge clk); #1;                       // edges 3, 5, 7, 9: multiply step
      check(dut.en == 4'b0100, "en multiply step");
      if (it > 0)
        check(dut.dividend_in == exp_a[it-1] && dut.divisor_in == exp_b[it-1],
              $sformatf("iteration %0d: a=%h b=%h", it, dut.dividend_in, dut.divisor_in));
      if (it == 3) break;
      @(posedge clk); #1;                       // edges 4, 6, 8: coefficient step
      check(dut.en == 4'b0010, "en coefficient step");
    end
    check(dut.u_iter.coe == 64'h00000001000d0000, "coefficient m4");
    @(posedge clk); #1;                         // edge 10
    check(dut.en == 4'b1000, "en data out");
    check(dut.dividend_out == exp_a[3] && dut.divisor_out == exp_b[3], "a4/b4");
    @(posedge clk); #1;                         // edge 11
    check(dut.en == 4'b0001, "en back to idle");
    check(quo_int == 32'h4 && quo_fra == 32'hd34d30f0 && !sign_out, "53/11 quotient");

    // a new start request during the division must be ignored: none here, checked below
    @(posedge clk); #1;                         // edge 11
    check(dut.en == 4'b0001, "en back to idle");
    check(quo_int == 32'h4 && quo_fra == 32'hd34d30f0 && !sign_out, "53/11 quotient");

    // published calculation examples
    table_case(-17, 35, -0.4868);
    table_case(53, 11, 4.8253);
    table_case(345, 4252, 0.0812);
    table_case(2741, 67, 40.9342);
    table_case(34242, 5567, 6.1759);
    table_case(89230293, 432424, 206.7367);
    table_case(2147483647, 947483647, 2.2685);
    table_case(2147483647, -47483647, -45.4989);

    // an operand change during a division is ignored
    @(negedge clk);
    dividend = 32'd100;
    divisor  = 32'd7;
    repeat (4) @(posedge clk);
    @(negedge clk);
    dividend = 32'd100;
    divisor  = 32'd9;                           // arrives mid-division
    repeat (12) @(posedge clk);
    #1;
    q = quotient_real();
    check(q > 14.0 && q < 14.4, $sformatf("100/7 = %f", q));
    check(dut.u_fsm.state == gs_pkg::S_IDLE, "idle after ignored start");
    if (q > 14.0 && q < 14.4) n_ignored++;

    // random operands
    for (int i = 0; i < 300; i++) begin
      int a, b;
      a = $signed($urandom) >>> ($urandom_range(0, 30));
      b = $signed($urandom) >>> ($urandom_range(0, 30));
      if (b == 0) b = 3;
      if (a == 0) a = 5;
      divide(a, b, q);
      ref_q = real'(a) / real'(b);
      rel   = (q - ref_q) / ref_q;
      if (rel < 0) rel = -rel;
      // 1 % of the exact quotient, plus one unit of the 32-bit fraction for tiny quotients
      check((q - ref_q) <= 0.01 * (ref_q < 0 ? -ref_q : ref_q) + 2.0**-32 &&
            (ref_q - q) <= 0.01 * (ref_q < 0 ? -ref_q : ref_q) + 2.0**-32,
            $sformatf("%0d/%0d = %g, exact %g", a, b, q, ref_q));
      check(sign_out == ((a < 0) != (b < 0)), $sformatf("%0d/%0d sign", a, b));
      if (q < 0) n_neg++;
      if (q < 1.0 && q > -1.0) n_small++;
    end

    $display("mechanisms: negative=%0d below_one=%0d carry=%0d no_carry=%0d lt1=%0d ge1=%0d ignored_start=%0d",
             n_neg, n_small, n_carry, n_nocarry, n_lt1, n_ge1, n_ignored);
    check(n_neg > 0 && n_small > 0 && n_carry > 0 && n_nocarry > 0 && n_lt1 > 0 && n_ge1 > 0 && n_ignored > 0,
          "every mechanism occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
