// tb_find_unit: builds parent chains of known depth in a model label BRAM
// and checks the root FIND returns, the 2*(d+1)+2-cycle latency for a vertex
// d steps below its root, and the write-back of the root to the start
// vertex (a second FIND of it then takes one step).
module tb_find_unit;
  import egs_pkg::*;
  localparam int WATCHDOG = 50000;
  `include "tb_common.svh"
  localparam int N = 40;
  logic start, busy, done, rd_en;
  label_t label_in, root, rd_addr, wr_addr;
  vertex_t rd_data, wr_data;
  vertex_we_t wr_we;

  find_unit dut (.*);
  tb_vmem #(.DEPTH(N)) mem (.clk, .rd_en, .rd_addr, .rd_data, .wr_we, .wr_addr, .wr_data);

  int par [N];   // model parents, as vertex numbers

  function automatic int depth_of(int v);
    int d = 0;
    while (par[v] != v) begin v = par[v]; d++; end
    return d;
  endfunction
  function automatic int root_of(int v);
    while (par[v] != v) v = par[v];
    return v;
  endfunction

  task automatic one(int v);
    longint t0;
    int d = depth_of(v), r = root_of(v);
    label_in <= label_t'(v + 1); start <= 1; @(posedge clk); start <= 0; t0 = cycles;
    while (!done) @(posedge clk);
    check(root == label_t'(r + 1), $sformatf("root of %0d: %0d, expected %0d", v, root, r + 1));
    check(cycles - t0 == 2 * (d + 1) + 2, $sformatf("latency %0d for depth %0d", cycles - t0, d));
    @(posedge clk);
    check(mem.mem[v].label == label_t'(r + 1), "start vertex now points at the root");
    par[v] = r;
  endtask

  initial begin
    start = 0; label_in = 24'd1;
    // forest: a chain 0<-1<-...<-9 style and random trees
    for (int v = 0; v < N; v++) par[v] = v;
    for (int v = 1; v < 10; v++) par[v] = v - 1;
    for (int v = 10; v < N; v++) par[v] = (v % 3 == 0) ? v : $urandom_range(10, v - 1);
    for (int v = 0; v < N; v++) mem.mem[v] = '{label: label_t'(par[v] + 1), size: 1, rank: 0, thr: 0};
    do_reset();
    one(9); one(9); one(0); one(5);
    for (int i = 0; i < 60; i++) one($urandom_range(0, N - 1));
    // a write-back never happens for a root
    begin
      automatic int w0 = mem.n_writes;
      one(0);
      check(mem.n_writes == w0, "no write-back for a root");
    end
    check(mem.n_outside == 0, "no vertex access outside the memory");
    finish_tb();
  end
endmodule
