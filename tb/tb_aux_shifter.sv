// tb_aux_shifter: checks shift_length (index of the leading one plus one, 0 for zero)
// for random 64-bit operands of every length, against a plain bit search.
module tb_aux_shifter;
  logic [63:0] num1, num2;
  logic [6:0]  shift_length_num1, shift_length_num2;
  int          checks = 0, failures = 0;

  aux_shifter dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int blen(input logic [63:0] v);
    int r = 0;
    for (int b = 0; b < 64; b++) if (v[b]) r = b + 1;
    return r;
  endfunction

  initial begin
    for (int i = 0; i < 1000; i++) begin
      num1 = {$urandom, $urandom} >> $urandom_range(0, 63);
      num2 = {$urandom, $urandom} >> $urandom_range(0, 63);
      if (i == 0) begin num1 = 0; num2 = '1; end
      if (i == 1) begin num1 = 1; num2 = 64'h1_5000_0000; end
      #1;
      check(int'(shift_length_num1) == blen(num1), $sformatf("num1 %h -> %0d", num1, shift_length_num1));
      check(int'(shift_length_num2) == blen(num2), $sformatf("num2 %h -> %0d", num2, shift_length_num2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
