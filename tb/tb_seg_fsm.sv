// tb_seg_fsm: runs the segmentation FSM over random sorted edge lists held
// in a model edge BRAM (four edges per address) and a model vertex BRAM,
// first in threshold mode and then in min-size mode, and compares the
// resulting grouping and merge counts with a plain union-find model. It
// also checks that each edge-BRAM address is read once, and that an empty
// list ends at once. A last test times single-edge walks whose Va and Vb
// sit at different depths below their roots: because FIND Va and FIND Vb
// run together (FIND Vb one cycle behind), going from depth 0/0 to 3/3 must
// cost 6 cycles (3 extra steps of 2 cycles, once) and to 3/0 must cost 5,
// where one FIND after the other would cost 12 and 6.
module tb_seg_fsm;
  import egs_pkg::*;
  localparam int WATCHDOG = 400000;
  `include "tb_common.svh"
  localparam int MAXE = 61, N = 20, K = 30, MINS = 3;
  localparam int ECW = $clog2(MAXE + 1), EAW = $clog2((MAXE + 3) / 4);
  logic start, busy, done, e_rd_en, v_rd_en;
  seg_mode_e mode;
  logic [ECW-1:0] num_edges, merges;
  thr_t k;
  size_t min_size;
  logic [EAW-1:0] e_rd_addr;
  edge_word_t e_rd_word;
  label_t v_rd_addr, v_wr_addr;
  vertex_t v_rd_data, v_wr_data;
  vertex_we_t v_wr_we;

  seg_fsm #(.MAX_EDGES(MAXE)) dut (.*);
  tb_vmem #(.DEPTH(N)) mem (.clk, .rd_en(v_rd_en), .rd_addr(v_rd_addr), .rd_data(v_rd_data),
                            .wr_we(v_wr_we), .wr_addr(v_wr_addr), .wr_data(v_wr_data));

  edge_word_t emem [(MAXE + 3) / 4];
  int n_eread = 0;
  always @(posedge clk) if (e_rd_en) begin e_rd_word <= emem[e_rd_addr]; n_eread++; end

  int par [N], sz [N], th [N];
  function automatic int mf(int v);
    while (par[v] != v) v = par[v];
    return v;
  endfunction
  function automatic bit mj(int va, int vb, int w, bit ms);
    int a = mf(va), b = mf(vb), s, t;
    if (a == b) return 0;
    if (ms ? !(sz[a] < MINS || sz[b] < MINS) : !(w <= th[a] && w <= th[b])) return 0;
    s = sz[a] + sz[b]; t = w + K / s; if (t > 255) t = 255;
    par[a] = b; sz[b] = s; th[b] = t;
    return 1;
  endfunction

  task automatic run(int n, seg_mode_e m, int exp_merges);
    longint t0;
    n_eread = 0;
    num_edges <= ECW'(n); mode <= m; start <= 1; @(posedge clk); start <= 0; t0 = cycles;
    while (!done) @(posedge clk);
    check(int'(merges) == exp_merges, $sformatf("merges %0d expected %0d (mode %0d)", merges, exp_merges, m));
    check(n_eread == (n + 3) / 4, $sformatf("edge words read %0d", n_eread));
  endtask

  // one edge from a vertex da steps below root 0 to one db steps below
  // root 4 (chains 3->2->1->0 and 7->6->5->4); returns start-to-done cycles
  task automatic timed_edge(int da, int db, output longint lat);
    longint t0;
    for (int v = 0; v < N; v++)
      mem.mem[v] = '{label: label_t'(((v % 4) == 0 || v >= 8) ? v + 1 : v), size: 1, rank: 0, thr: thr_t'(K)};
    emem[0][0] = '{va: label_t'(da + 1), vb: label_t'(4 + db + 1), w: '0};
    num_edges <= ECW'(1); mode <= MODE_THRESHOLD; start <= 1; @(posedge clk); start <= 0; t0 = cycles;
    while (!done) @(posedge clk);
    lat = cycles - t0;
    check(merges == 1, "timed edge merges");
  endtask

  task automatic check_groups();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        int ri = i, rj = j;
        while (int'(mem.mem[ri].label) != ri + 1) ri = int'(mem.mem[ri].label) - 1;
        while (int'(mem.mem[rj].label) != rj + 1) rj = int'(mem.mem[rj].label) - 1;
        check((ri == rj) == (mf(i) == mf(j)), $sformatf("grouping of %0d and %0d", i, j));
      end
  endtask

  initial begin
    start = 0; num_edges = '0; mode = MODE_THRESHOLD; k = thr_t'(K); min_size = size_t'(MINS);
    do_reset();
    // empty list
    num_edges <= '0; start <= 1; @(posedge clk); start <= 0; @(posedge clk);
    check(done === 1'b1 || n_eread == 0, "empty list ends at once");
    for (int trial = 0; trial < 4; trial++) begin
      automatic int ws [MAXE];
      automatic int n = (trial == 0) ? MAXE : $urandom_range(1, MAXE);
      automatic int mt = 0, mm = 0;
      for (int v = 0; v < N; v++) begin
        par[v] = v; sz[v] = 1; th[v] = K;
        mem.mem[v] = '{label: label_t'(v + 1), size: 1, rank: 0, thr: thr_t'(K)};
      end
      // sorted random weights; edges between random distinct vertices
      for (int i = 0; i < n; i++) ws[i] = $urandom_range(0, 45);
      ws.sort();
      for (int i = 0; i < n; i++) begin
        automatic int a = $urandom_range(0, N - 1);
        automatic int b = (a + $urandom_range(1, N - 1)) % N;
        emem[i / 4][i % 4] = '{va: label_t'(a + 1), vb: label_t'(b + 1), w: weight_t'(ws[i])};
      end
      for (int i = 0; i < n; i++) mt += mj(emem[i/4][i%4].va - 1, emem[i/4][i%4].vb - 1, ws[i], 0);
      run(n, MODE_THRESHOLD, mt);
      check_groups();
      for (int i = 0; i < n; i++) mm += mj(emem[i/4][i%4].va - 1, emem[i/4][i%4].vb - 1, ws[i], 1);
      run(n, MODE_MINSIZE, mm);
      check_groups();
      $display("trial %0d: %0d edges, %0d threshold merges, %0d min-size merges", trial, n, mt, mm);
    end
    begin
      longint l00, l33, l30;
      timed_edge(0, 0, l00);
      timed_edge(3, 3, l33);
      timed_edge(3, 0, l30);
      $display("single-edge walk: %0d cycles (depths 0/0), %0d (3/3), %0d (3/0)", l00, l33, l30);
      check(l33 - l00 == 6, $sformatf("FINDs overlap: depth 3/3 costs %0d extra cycles, expected 6", l33 - l00));
      check(l30 - l00 == 5, $sformatf("FINDs overlap: depth 3/0 costs %0d extra cycles, expected 5", l30 - l00));
    end
    check(mem.n_outside == 0, "no vertex access outside the memory");
    finish_tb();
  end
endmodule
