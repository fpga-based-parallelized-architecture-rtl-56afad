// tb_edge_sort: streams random edges (with many equal weights) into the
// counting sort and checks the edge BRAM contents it writes: the first
// count positions hold the input edges in non-decreasing weight order,
// equal weights in arrival order (a stable sort), each written once.
module tb_edge_sort;
  import egs_pkg::*;
  localparam int WATCHDOG = 40000;
  `include "tb_common.svh"
  localparam int MAXE = 70, NB = 512;
  localparam int ECW = $clog2(MAXE + 1), EAW = $clog2((MAXE + 3) / 4);
  logic start, ready, in_valid, in_done, busy, done, o_wr_en;
  edge_t in_edge, o_wr_edge;
  logic [ECW-1:0] count;
  logic [1:0] o_wr_lane;
  logic [EAW-1:0] o_wr_addr;
  edge_t outm [MAXE + 3];
  int    wrote [MAXE + 3];

  edge_sort #(.MAX_EDGES(MAXE), .NBINS(NB)) dut (.*);
  always @(posedge clk) if (rst_n && o_wr_en) begin
    outm[o_wr_addr * 4 + o_wr_lane] = o_wr_edge;
    wrote[o_wr_addr * 4 + o_wr_lane]++;
  end

  task automatic one(int n);
    edge_t ins [$];
    edge_t exp_s [$];
    foreach (wrote[i]) wrote[i] = 0;
    for (int i = 0; i < n; i++) begin
      edge_t e;
      e.va = label_t'(i + 1);
      e.vb = label_t'($urandom);
      e.w  = weight_t'((i % 7 == 0) ? 441 : $urandom_range(0, 12));
      ins.push_back(e);
    end
    for (int w = 0; w < NB; w++) foreach (ins[i]) if (ins[i].w == w) exp_s.push_back(ins[i]);
    start <= 1; @(posedge clk); start <= 0;
    while (!ready) @(posedge clk);
    foreach (ins[i]) begin
      in_valid <= 1; in_edge <= ins[i];
      if ($urandom_range(0, 3) == 0) begin @(posedge clk); in_valid <= 0; end
      @(posedge clk);
    end
    in_valid <= 0; in_done <= 1; @(posedge clk); in_done <= 0;
    while (!done) @(posedge clk);
    check(int'(count) == n, "count");
    for (int i = 0; i < n; i++) begin
      check(wrote[i] == 1, $sformatf("position %0d written once", i));
      check(outm[i] == exp_s[i], $sformatf("position %0d: w %0d va %0d, expected w %0d va %0d",
            i, outm[i].w, outm[i].va, exp_s[i].w, exp_s[i].va));
    end
  endtask

  initial begin
    start = 0; in_valid = 0; in_done = 0; in_edge = '0;
    do_reset();
    one(MAXE); one(13); one(1);
    finish_tb();
  end
endmodule
