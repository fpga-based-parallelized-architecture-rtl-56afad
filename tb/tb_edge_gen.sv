// tb_edge_gen: runs graph formation on a random 6 x 5 image held in a
// model pixel BRAM and checks the edge stream against an edge list built
// here: the same neighbours (above-right, right, below-right, below) in the
// same order, labels base + index + 1, and weights equal to the integer
// part of the Euclidean RGB distance, including the largest one (441).
module tb_edge_gen;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int TW = 6, TH = 5, NE = (TW-1)*TH + TW*(TH-1) + 2*(TW-1)*(TH-1);
  logic start, busy, done, p_rd_en, e_valid;
  label_t base;
  logic [4:0] p_rd_addr;
  rgb_t p_rd_data;
  edge_t e_edge;
  rgb_t pix [TW*TH];
  edge_t exp_e [$];
  int n_got = 0;

  edge_gen #(.TW(TW), .TH(TH)) dut (.*);
  always @(posedge clk) if (p_rd_en) p_rd_data <= pix[p_rd_addr];

  function automatic int isq(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  always @(posedge clk) if (rst_n && e_valid) begin
    if (n_got < exp_e.size())
      check(e_edge == exp_e[n_got], $sformatf("edge %0d: %0h-%0h w%0d, expected %0h-%0h w%0d", n_got,
            e_edge.va, e_edge.vb, e_edge.w, exp_e[n_got].va, exp_e[n_got].vb, exp_e[n_got].w));
    n_got++;
  end

  initial begin
    int dx [4] = '{1, 1, 1, 0};
    int dy [4] = '{-1, 0, 1, 1};
    start = 0; base = 24'h000040;
    for (int i = 0; i < TW*TH; i++) pix[i] = rgb_t'($urandom);
    pix[0] = '{r: 0, g: 0, b: 0};  pix[1] = '{r: 255, g: 255, b: 255};   // weight 441
    for (int y = 0; y < TH; y++)
      for (int x = 0; x < TW; x++)
        for (int q = 0; q < 4; q++) begin
          automatic int nx = x + dx[q], ny = y + dy[q];
          if (nx >= 0 && nx < TW && ny >= 0 && ny < TH) begin
            automatic rgb_t a = pix[y*TW + x], b = pix[ny*TW + nx];
            automatic int d = (int'(a.r)-int'(b.r))**2 + (int'(a.g)-int'(b.g))**2 + (int'(a.b)-int'(b.b))**2;
            exp_e.push_back('{va: base + label_t'(y*TW + x + 1), vb: base + label_t'(ny*TW + nx + 1),
                              w: weight_t'(isq(d))});
          end
        end
    check(exp_e.size() == NE, "model edge count");
    do_reset();
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    check(n_got == NE, $sformatf("%0d edges, expected %0d", n_got, NE));
    check(exp_e[0].w == 441, "largest weight present");
    finish_tb();
  end
endmodule
