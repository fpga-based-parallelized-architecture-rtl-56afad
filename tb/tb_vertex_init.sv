// tb_vertex_init: checks that every vertex of a bank is written once with
// label = base + address + 1, size 1, rank 0, t = k, all fields enabled,
// and that done comes COUNT+1 cycles after start.
module tb_vertex_init;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int COUNT = 37;
  logic start, busy, done;
  label_t base;
  thr_t k;
  vertex_we_t wr_we;
  logic [5:0] wr_addr;
  vertex_t wr_data;
  int seen [COUNT];

  vertex_init #(.COUNT(COUNT)) dut (.*);

  always @(posedge clk) if (rst_n && wr_we != '0) begin
    check(wr_we == '1, "all four fields written");
    check(int'(wr_addr) < COUNT, "address in range");
    if (int'(wr_addr) < COUNT) seen[wr_addr]++;
    check(wr_data.label == base + label_t'(wr_addr) + 1, "label");
    check(wr_data.size == 1 && wr_data.rank == 0 && wr_data.thr == k, "size/rank/t");
  end

  initial begin
    longint t0;
    start = 0; base = 24'h000800; k = 8'd77;
    do_reset();
    for (int r = 0; r < 2; r++) begin
      foreach (seen[i]) seen[i] = 0;
      start <= 1; @(posedge clk); start <= 0; t0 = cycles;
      while (!done) @(posedge clk);
      check(cycles - t0 == COUNT + 1, $sformatf("latency %0d", cycles - t0));
      foreach (seen[i]) check(seen[i] == 1, $sformatf("vertex %0d written once", i));
      base = 24'h001000; k = 8'd5;
      @(posedge clk);
    end
    finish_tb();
  end
endmodule
