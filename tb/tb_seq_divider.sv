// tb_seq_divider: random and corner-case divisions against the / and %
// operators, and the WIDTH-cycle latency.
module tb_seq_divider;
  localparam int WATCHDOG = 100000;
  `include "tb_common.svh"
  localparam int W = 24;
  logic start, busy, done;
  logic [W-1:0] dividend, divisor, quotient, remainder;

  seq_divider #(.WIDTH(W)) dut (.*);

  task automatic one(logic [W-1:0] a, logic [W-1:0] b);
    longint t0;
    dividend <= a; divisor <= b; start <= 1; @(posedge clk); start <= 0; t0 = cycles;
    while (!done) @(posedge clk);
    check(cycles - t0 == W + 1, $sformatf("latency %0d", cycles - t0));
    if (b != 0) check(quotient == a / b && remainder == a % b,
                      $sformatf("%0d / %0d gave %0d r %0d", a, b, quotient, remainder));
    else        check(quotient == '1, "divide by zero gives all ones");
  endtask

  initial begin
    start = 0; dividend = '0; divisor = '1;
    do_reset();
    one(255, 2); one(0, 7); one(24'hFFFFFF, 1); one(24'hFFFFFF, 24'hFFFFFF); one(5, 9); one(9, 0);
    one(24'h800000, 3);
    for (int i = 0; i < 200; i++) one(W'($urandom), W'($urandom_range(1, 3000)));
    finish_tb();
  end
endmodule
