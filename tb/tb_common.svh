// tb_common.svh: clock, reset, check counting and watchdog shared by the
// block testbenches. The including module defines WATCHDOG (in cycles).
  logic clk = 1'b0;
  logic rst_n = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycles = 0;
  always @(posedge clk) cycles++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  task automatic do_reset();
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
  endtask

  task automatic finish_tb();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", WATCHDOG);
    finish_tb();
  end
