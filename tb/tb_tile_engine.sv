// tb_tile_engine: one 8 x 6 sub-image of flat regions with noise. After the
// tile finishes, the testbench takes its ports (gsel) and reads the vertex
// BRAMs back; the grouping must match a model of graph formation, stable
// sort by weight and threshold merging written here, and the edge count and
// merge count must agree. The edge BRAM is read back too: its edges must be
// in non-decreasing weight order.
module tb_tile_engine;
  import egs_pkg::*;
  localparam int WATCHDOG = 200000;
  `include "tb_common.svh"
  localparam int TW = 8, TH = 6, NPIX = TW * TH, LW = 6, K = 25, TILE = 3;
  localparam int NE = (TW-1)*TH + TW*(TH-1) + 2*(TW-1)*(TH-1);
  localparam int ECW = $clog2(NE + 1), EAW = $clog2((NE + 3) / 4);
  logic start, done, finished, pix_we, gsel, g_p_rd_en, g_e_rd_en, g_v_rd_en;
  label_t base;
  thr_t k;
  logic [ECW-1:0] num_edges, merges;
  logic [LW-1:0] pix_addr, g_p_rd_addr, g_v_rd_addr, g_v_wr_addr;
  rgb_t pix_data, g_p_rd_data;
  logic [EAW-1:0] g_e_rd_addr;
  edge_word_t g_e_rd_word;
  vertex_t g_v_rd_data, g_v_wr_data;
  vertex_we_t g_v_wr_we;

  tile_engine #(.TW(TW), .TH(TH)) dut (.*);

  rgb_t img [NPIX];
  int par [NPIX], sz [NPIX], th [NPIX];
  function automatic int mf(int v);
    while (par[v] != v) v = par[v];
    return v;
  endfunction
  function automatic int isq(int v);
    int r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  initial begin
    typedef struct { int a; int b; int w; } me_t;
    me_t raw [$];
    int dx [4] = '{1, 1, 1, 0};
    int dy [4] = '{-1, 0, 1, 1};
    int m_merges = 0;
    label_t lab [NPIX];
    int prev_w;
    start = 0; pix_we = 0; pix_addr = '0; pix_data = '0; gsel = 0;
    g_p_rd_en = 0; g_e_rd_en = 0; g_v_rd_en = 0; g_p_rd_addr = '0; g_v_rd_addr = '0;
    g_v_wr_addr = '0; g_e_rd_addr = '0; g_v_wr_we = '0; g_v_wr_data = '0;
    base = label_t'(TILE << LW); k = thr_t'(K);
    for (int i = 0; i < NPIX; i++) begin
      automatic rgb_t c = ((i % TW) < 3) ? '{r: 8'd30, g: 8'd80, b: 8'd150} :
                ((i / TW) < 2) ? '{r: 8'd200, g: 8'd40, b: 8'd40} : '{r: 8'd60, g: 8'd160, b: 8'd70};
      c.r = c.r + 8'($urandom_range(0, 4));
      if ($urandom_range(0, 12) == 0) c.g = 8'd255;
      img[i] = c;
    end
    // model
    for (int y = 0; y < TH; y++)
      for (int x = 0; x < TW; x++)
        for (int q = 0; q < 4; q++) begin
          automatic int nx = x + dx[q], ny = y + dy[q];
          if (nx >= 0 && nx < TW && ny >= 0 && ny < TH) begin
            automatic rgb_t a = img[y*TW + x], b = img[ny*TW + nx];
            automatic int d = (int'(a.r)-int'(b.r))**2 + (int'(a.g)-int'(b.g))**2 + (int'(a.b)-int'(b.b))**2;
            raw.push_back('{a: y*TW + x, b: ny*TW + nx, w: isq(d)});
          end
        end
    for (int v = 0; v < NPIX; v++) begin par[v] = v; sz[v] = 1; th[v] = K; end
    for (int w = 0; w < 512; w++)
      foreach (raw[i]) if (raw[i].w == w) begin
        automatic int ra = mf(raw[i].a), rb = mf(raw[i].b);
        if (ra != rb && w <= th[ra] && w <= th[rb]) begin
          automatic int s = sz[ra] + sz[rb];
          automatic int t = w + K / s;
          if (t > 255) t = 255;
          par[ra] = rb; sz[rb] = s; th[rb] = t; m_merges++;
        end
      end
    // DUT
    do_reset();
    for (int i = 0; i < NPIX; i++) begin
      pix_we <= 1; pix_addr <= LW'(i); pix_data <= img[i]; @(posedge clk);
    end
    pix_we <= 0;
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    check(finished, "finished stays high");
    check(int'(num_edges) == NE, "edge count");
    check(int'(merges) == m_merges, $sformatf("merges %0d expected %0d", merges, m_merges));
    gsel <= 1;
    for (int v = 0; v < NPIX; v++) begin
      g_v_rd_en <= 1; g_v_rd_addr <= LW'(v); @(posedge clk); g_v_rd_en <= 0; #1;
      lab[v] = g_v_rd_data.label;
      check((g_v_rd_data.label >> LW) == label_t'(TILE), "label carries the tile number");
    end
    for (int i = 0; i < NPIX; i++)
      for (int j = 0; j < NPIX; j++) begin
        automatic int ri = i, rj = j;
        while (int'(lab[ri]) - 1 - (TILE << LW) != ri) ri = int'(lab[ri]) - 1 - (TILE << LW);
        while (int'(lab[rj]) - 1 - (TILE << LW) != rj) rj = int'(lab[rj]) - 1 - (TILE << LW);
        check((ri == rj) == (mf(i) == mf(j)), $sformatf("grouping %0d %0d", i, j));
      end
    prev_w = 0;
    for (int a = 0; a < (NE + 3) / 4; a++) begin
      g_e_rd_en <= 1; g_e_rd_addr <= EAW'(a); @(posedge clk); g_e_rd_en <= 0; #1;
      for (int l = 0; l < 4; l++) if (a * 4 + l < NE) begin
        check(int'(g_e_rd_word[l].w) >= prev_w, "edges sorted");
        prev_w = int'(g_e_rd_word[l].w);
      end
    end
    $display("%0d merges, %0d edges", merges, num_edges);
    finish_tb();
  end
endmodule
