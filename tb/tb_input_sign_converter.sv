// tb_input_sign_converter: checks magnitudes and quotient sign of the input sign
// converter against values computed here, including the most negative operands, and
// that the outputs load only while en0 is high and clear on reset.
module tb_input_sign_converter;
  logic        clk = 1'b0, rst, en0;
  logic [31:0] dividend, divisor;
  logic [31:0] dividend_unsigned, divisor_unsigned;
  logic        sign;
  int          checks = 0, failures = 0;

  input_sign_converter dut (.*);
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

  function automatic logic [31:0] mag(input logic [31:0] v);
    longint x = longint'($signed(v));
    return 32'(x < 0 ? -x : x);
  endfunction

  initial begin
    logic [31:0] a, b, ha, hb;
    logic        hs;
    rst = 1'b1; en0 = 1'b0; dividend = 32'h8000_0000; divisor = 32'hffff_ffff;
    @(posedge clk); #1;
    check(dividend_unsigned == 0 && divisor_unsigned == 0 && !sign, "reset");
    rst = 1'b0; en0 = 1'b1;
    @(posedge clk); #1;
    check(dividend_unsigned == 32'h8000_0000 && divisor_unsigned == 1 && !sign, "most negative / -1");
    for (int i = 0; i < 500; i++) begin
      a = $urandom >> $urandom_range(0, 31);
      b = $urandom >> $urandom_range(0, 31);
      if ($urandom_range(0, 1)) a = -a;
      if ($urandom_range(0, 1)) b = -b;
      dividend = a; divisor = b;
      en0 = ($urandom_range(0, 3) != 0);
      ha = dividend_unsigned; hb = divisor_unsigned; hs = sign;
      @(posedge clk); #1;
      if (en0)
        check(dividend_unsigned == mag(a) && divisor_unsigned == mag(b) && sign == (a[31] ^ b[31]),
              $sformatf("%h %h -> %h %h %b", a, b, dividend_unsigned, divisor_unsigned, sign));
      else
        check(dividend_unsigned == ha && divisor_unsigned == hb && sign == hs, "hold while en0 low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
