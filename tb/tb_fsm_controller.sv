// tb_fsm_controller: checks the enable sequence of the controller after a start pulse
// (0000, 0011, 0100, 0010, 0100, 0010, 0100, 0010, 0100, 1000, then 0001), its length,
// that start is ignored during a division, and the reset value.
module tb_fsm_controller;
  logic       clk = 1'b0, rst, start;
  logic [3:0] en;
  int         checks = 0, failures = 0;
  logic [3:0] expected [11] = '{4'b0000, 4'b0011, 4'b0100, 4'b0010, 4'b0100, 4'b0010,
                                4'b0100, 4'b0010, 4'b0100, 4'b1000, 4'b0001};

  fsm_controller dut (.*);
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
    rst = 1'b1; start = 1'b0;
    repeat (2) @(posedge clk); #1;
    check(en == 4'b0001, "reset value");
    rst = 1'b0;
    for (int run = 0; run < 20; run++) begin
      repeat ($urandom_range(1, 4)) begin
        @(posedge clk); #1;
        check(en == 4'b0001, "idle");
      end
      start = 1'b1;                           // start high for one cycle
      for (int c = 0; c < 11; c++) begin
        @(posedge clk); #1;
        start = (c > 0 && c < 9) ? 1'(($urandom_range(0, 3)) == 0) : 1'b0;  // noise mid-run
        check(en == expected[c], $sformatf("run %0d cycle %0d en=%b", run, c + 1, en));
      end
      start = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
