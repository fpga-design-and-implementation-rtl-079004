// tb_output_sign_converter: checks that {sign_out, quo_int, quo_fra} is the two's
// complement of dividend_out when sign is set (and dividend_out itself otherwise), that
// the outputs load only while en3 is high, and the reset value.
module tb_output_sign_converter;
  logic        clk = 1'b0, rst, en3, sign;
  logic [63:0] dividend_out;
  logic [31:0] quo_int, quo_fra;
  logic        sign_out;
  int          checks = 0, failures = 0;

  output_sign_converter dut (.*);
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
    logic [64:0] expected, held;
    rst = 1'b1; en3 = 1'b1; sign = 1'b1; dividend_out = 64'h1234;
    @(posedge clk); #1;
    check({sign_out, quo_int, quo_fra} == 65'h0, "reset");
    rst = 1'b0;
    for (int i = 0; i < 1000; i++) begin
      dividend_out = {$urandom, $urandom} >> $urandom_range(0, 63);
      if (i == 0) dividend_out = 0;
      if (i == 1) dividend_out = 64'h0000000004d34d30f0;
      sign = $urandom_range(0, 1);
      en3  = (i < 4) ? 1'b1 : 1'($urandom_range(0, 2) != 0);
      held = {sign_out, quo_int, quo_fra};
      expected = sign ? (~{1'b0, dividend_out} + 65'd1) : {1'b0, dividend_out};
      @(posedge clk); #1;
      if (en3) check({sign_out, quo_int, quo_fra} == expected,
                     $sformatf("%b %h -> %b %h %h", sign, dividend_out, sign_out, quo_int, quo_fra));
      else     check({sign_out, quo_int, quo_fra} == held, "hold while en3 low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
