// tb_stitch_unit: 3 x 2 tiles of 4 x 3 pixels in model pixel BRAMs. Checks
// the seam edge list written to the seam edge BRAM: every horizontal-seam
// edge (rightmost column to leftmost column of the next tile) and then
// every vertical-seam edge (bottom row to top row of the tile below), with
// tile-based labels and Euclidean weights, in order, and the edge count.
module tb_stitch_unit;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int NCOL = 3, NROW = 2, TW = 4, TH = 3, NT = NCOL * NROW, LW = 4;
  localparam int NS = NROW * (NCOL - 1) * TH + (NROW - 1) * NCOL * TW;
  localparam int SCW = $clog2(NS + 1), SAW = $clog2((NS + 3) / 4);
  logic start, busy, done, p_rd_en, o_wr_en;
  logic [SCW-1:0] num_edges;
  logic [2:0] p_rd_tile;
  logic [LW-1:0] p_rd_addr;
  rgb_t p_rd_data;
  logic [1:0] o_wr_lane;
  logic [SAW-1:0] o_wr_addr;
  edge_t o_wr_edge;
  rgb_t pix [NT][TW*TH];
  edge_t got [NS + 3];
  int nw = 0;

  stitch_unit #(.NCOL(NCOL), .NROW(NROW), .TW(TW), .TH(TH)) dut (.*);
  always @(posedge clk) if (p_rd_en) p_rd_data <= pix[p_rd_tile][p_rd_addr];
  always @(posedge clk) if (rst_n && o_wr_en) begin got[o_wr_addr * 4 + o_wr_lane] = o_wr_edge; nw++; end

  function automatic int isq(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction
  function automatic edge_t mk(int ta, int aa, int tb, int ab);
    rgb_t a = pix[ta][aa], b = pix[tb][ab];
    int d = (int'(a.r)-int'(b.r))**2 + (int'(a.g)-int'(b.g))**2 + (int'(a.b)-int'(b.b))**2;
    return '{va: label_t'((ta << LW) + aa + 1), vb: label_t'((tb << LW) + ab + 1), w: weight_t'(isq(d))};
  endfunction

  initial begin
    edge_t exp_e [$];
    start = 0;
    foreach (pix[t, i]) pix[t][i] = rgb_t'($urandom);
    for (int r = 0; r < NROW; r++)
      for (int c = 0; c < NCOL - 1; c++)
        for (int y = 0; y < TH; y++) exp_e.push_back(mk(r*NCOL + c, y*TW + TW-1, r*NCOL + c + 1, y*TW));
    for (int r = 0; r < NROW - 1; r++)
      for (int c = 0; c < NCOL; c++)
        for (int x = 0; x < TW; x++) exp_e.push_back(mk(r*NCOL + c, (TH-1)*TW + x, (r+1)*NCOL + c, x));
    do_reset();
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    check(int'(num_edges) == NS && nw == NS, $sformatf("%0d edges written, expected %0d", nw, NS));
    foreach (exp_e[i]) check(got[i] == exp_e[i], $sformatf("seam edge %0d", i));
    finish_tb();
  end
endmodule
