// tb_iteration_trigger: checks that start is a one-cycle pulse, high in the cycle after
// the edge that first samples changed operands, and low while the operands are steady.
module tb_iteration_trigger;
  logic        clk = 1'b0, rst;
  logic [31:0] dividend, divisor;
  logic        start;
  int          checks = 0, failures = 0;

  iteration_trigger dut (.*);
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
    rst = 1'b1; dividend = 0; divisor = 0;
    repeat (2) @(posedge clk); #1;
    check(!start, "reset");
    rst = 1'b0;
    repeat (3) @(posedge clk); #1;
    check(!start, "steady zero operands");
    for (int i = 0; i < 200; i++) begin
      int which = $urandom_range(0, 2);
      @(negedge clk);
      if (which != 1) dividend = dividend + 1 + $urandom_range(0, 1000);
      if (which != 0) divisor  = divisor  + 1 + $urandom_range(0, 1000);
      @(posedge clk); #1;                   // edge 0 samples the change
      check(start, "start high after the sampling edge");
      @(posedge clk); #1;
      check(!start, "start is a single-cycle pulse");
      repeat ($urandom_range(0, 4)) begin
        @(posedge clk); #1;
        check(!start, "start low while operands steady");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
