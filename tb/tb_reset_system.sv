// tb_reset_system -- self-checking test of the reset synchroniser and hold counter.
//
// Presses the (active-low) switch, bounces it, and checks that reset is asserted within
// three clocks of a press, stays asserted while the switch bounces, and is released exactly
// HOLD + 3 clocks after the final release. Also checks that reset is high at power-up.
module tb_reset_system;
  localparam int HOLD = 16;

  logic clk = 0, sw = 1, rst;

  reset_system #(.HOLD(HOLD)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n;
    #1 check("asserted at power-up", int'(rst), 1);
    for (int rep = 0; rep < 3; rep++) begin
      @(posedge clk); sw <= 0;                  // press
      repeat (3) @(posedge clk);
      #1 check("asserted after press", int'(rst), 1);
      for (int b = 0; b < 5; b++) begin         // bounce
        @(posedge clk); sw <= 1;
        repeat (3) @(posedge clk); sw <= 0;
        #1 check("held during bounce", int'(rst), 1);
      end
      @(posedge clk); sw <= 1;                  // final release
      n = 0;
      do begin @(posedge clk); #1; n++; end while (rst && n < 100);
      check("release delay", n, HOLD + 3);
      repeat (10) @(posedge clk);
      #1 check("stays released", int'(rst), 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
