// tb_join_unit: drives JOIN with pairs of roots held in a model vertex BRAM
// and checks, against the rules written out here, whether it merges (both
// modes), which root survives (higher rank, else lb with rank + 1), the new
// size, the new threshold w + k/size saturated to 8 bits, and that a
// non-merge writes nothing.
module tb_join_unit;
  import egs_pkg::*;
  localparam int WATCHDOG = 200000;
  `include "tb_common.svh"
  localparam int N = 32;
  logic start, busy, done, merged, rd_en;
  seg_mode_e mode;
  label_t la, lb, rd_addr, wr_addr;
  weight_t w;
  thr_t k;
  size_t min_size;
  vertex_t rd_data, wr_data;
  vertex_we_t wr_we;
  int n_merge = 0, n_nomerge = 0, n_same = 0;

  join_unit dut (.*);
  tb_vmem #(.DEPTH(N)) mem (.clk, .rd_en, .rd_addr, .rd_data, .wr_we, .wr_addr, .wr_data);

  task automatic one(int a, int b, int wt, seg_mode_e m);
    vertex_t A = mem.mem[a], B = mem.mem[b];
    bit exp_merge;
    int w0 = mem.n_writes;
    int s, t, r;
    int root, child;
    if (a == b) exp_merge = 0;
    else if (m == MODE_THRESHOLD) exp_merge = (wt <= int'(A.thr)) && (wt <= int'(B.thr));
    else exp_merge = (int'(A.size) < int'(min_size)) || (int'(B.size) < int'(min_size));
    la <= label_t'(a + 1); lb <= label_t'(b + 1); w <= weight_t'(wt); mode <= m;
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    check(merged == exp_merge, $sformatf("merge decision %0d-%0d w=%0d mode=%0d", a, b, wt, m));
    @(posedge clk);
    if (a == b) n_same++;
    if (!exp_merge) begin
      if (a != b) n_nomerge++;
      check(mem.n_writes == w0, "no write without a merge");
      return;
    end
    n_merge++;
    if (A.rank > B.rank) begin root = a; child = b; r = int'(A.rank); end
    else begin root = b; child = a; r = (A.rank == B.rank) ? int'(B.rank) + 1 : int'(B.rank); end
    s = int'(A.size) + int'(B.size);
    t = wt + int'(k) / s; if (t > 255) t = 255;
    check(mem.mem[child].label == label_t'(root + 1), "child points at new root");
    check(mem.mem[root].label == label_t'(root + 1), "root label unchanged");
    check(int'(mem.mem[root].size) == s, "new size");
    check(int'(mem.mem[root].rank) == r, "new rank");
    check(int'(mem.mem[root].thr) == t, $sformatf("new t %0d expected %0d", mem.mem[root].thr, t));
  endtask

  initial begin
    int roots [$];
    start = 0; la = 1; lb = 1; w = 0; mode = MODE_THRESHOLD; k = 8'd200; min_size = 24'd4;
    for (int v = 0; v < N; v++)
      mem.mem[v] = '{label: label_t'(v + 1), size: 1, rank: 0, thr: thr_t'($urandom_range(0, 60))};
    mem.mem[3].thr = 8'd250;
    do_reset();
    one(2, 2, 0, MODE_THRESHOLD);                 // same component
    one(0, 1, 255, MODE_THRESHOLD);               // weight above both thresholds
    for (int v = 0; v < N; v++) roots.push_back(v);
    for (int i = 0; i < 400 && roots.size() > 1; i++) begin
      automatic int ia = $urandom_range(0, roots.size() - 1);
      automatic int ib = $urandom_range(0, roots.size() - 1);
      automatic int a = roots[ia], b = roots[ib];
      automatic seg_mode_e m = seg_mode_e'($urandom_range(0, 1));
      one(a, b, $urandom_range(0, 70), m);
      // keep only roots in the list
      roots.delete();
      for (int v = 0; v < N; v++) if (mem.mem[v].label == label_t'(v + 1)) roots.push_back(v);
    end
    $display("merges %0d, rejections %0d, same root %0d", n_merge, n_nomerge, n_same);
    check(n_merge > 3 && n_nomerge > 3 && n_same > 0, "merges, rejections and same-root cases all seen");
    check(mem.n_outside == 0, "no vertex access outside the memory");
    finish_tb();
  end
endmodule
