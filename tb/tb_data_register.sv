// tb_data_register: drives every enable code and checks which source the operand
// register loads: *_fix for 0001/0000/0011, *_out for 0010/1000, hold otherwise.
module tb_data_register;
  logic        clk = 1'b0, rst;
  logic [3:0]  en;
  logic [63:0] dividend_fix, divisor_fix, dividend_out, divisor_out, dividend_in, divisor_in;
  int          checks = 0, failures = 0;

  data_register dut (.*);
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
    logic [63:0] ea, eb;
    rst = 1'b1; en = 4'b0001;
    dividend_fix = '1; divisor_fix = '1; dividend_out = '1; divisor_out = '1;
    @(posedge clk); #1;
    check(dividend_in == 0 && divisor_in == 0, "reset");
    rst = 1'b0;
    for (int i = 0; i < 600; i++) begin
      en = (i < 16) ? 4'(i) : 4'($urandom);
      dividend_fix = {$urandom, $urandom}; divisor_fix = {$urandom, $urandom};
      dividend_out = {$urandom, $urandom}; divisor_out = {$urandom, $urandom};
      case (en)
        4'b0001, 4'b0000, 4'b0011: begin ea = dividend_fix; eb = divisor_fix; end
        4'b0010, 4'b1000:          begin ea = dividend_out; eb = divisor_out; end
        default:                   begin ea = dividend_in;  eb = divisor_in;  end
      endcase
      @(posedge clk); #1;
      check(dividend_in == ea && divisor_in == eb, $sformatf("en=%b", en));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
