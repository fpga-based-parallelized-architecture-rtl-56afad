// tb_recolor_unit: a 6 x 4 image in 2 x 2 tiles of 3 x 2 pixels whose
// vertex BRAM holds a random forest. Checks that every pixel comes out once
// in raster order with the root label of its tree (found through the
// tile-based label of the pixel) and the colour root * 0x9E3779 mod 2^24.
module tb_recolor_unit;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int NCOL = 2, NROW = 2, TW = 3, TH = 2, LW = 3, W = NCOL * TW, H = NROW * TH;
  localparam int NV = (NCOL * NROW) << LW;
  logic start, busy, done, out_valid, rd_en;
  logic [2:0] out_x, out_y;
  label_t out_label, rd_addr, wr_addr;
  rgb_t out_rgb;
  vertex_t rd_data, wr_data;
  vertex_we_t wr_we;
  int par [NV];
  int n_out = 0;

  recolor_unit #(.NCOL(NCOL), .NROW(NROW), .TW(TW), .TH(TH)) dut (.*);
  tb_vmem #(.DEPTH(NV)) mem (.clk, .rd_en, .rd_addr, .rd_data, .wr_we, .wr_addr, .wr_data);

  function automatic int vid_of(int x, int y);
    return (((y / TH) * NCOL + x / TW) << LW) + (y % TH) * TW + x % TW;
  endfunction
  function automatic int root_of(int v);
    while (par[v] != v) v = par[v];
    return v;
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int x = n_out % W, y = n_out / W;
    automatic int r = root_of(vid_of(x, y));
    check(int'(out_x) == x && int'(out_y) == y, $sformatf("pixel order at %0d", n_out));
    check(out_label == label_t'(r + 1), $sformatf("label of (%0d,%0d)", x, y));
    check(out_rgb == rgb_t'(label_t'(r + 1) * 24'h9E3779), "colour");
    n_out++;
  end

  initial begin
    int valid [$];
    start = 0;
    for (int v = 0; v < NV; v++) par[v] = v;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) valid.push_back(vid_of(x, y));
    foreach (valid[i]) if (i > 0 && $urandom_range(0, 3) != 0) par[valid[i]] = valid[$urandom_range(0, i - 1)];
    for (int v = 0; v < NV; v++) mem.mem[v] = '{label: label_t'(par[v] + 1), size: 1, rank: 0, thr: 0};
    do_reset();
    start <= 1; @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    check(n_out == W * H, $sformatf("%0d pixels out", n_out));
    check(mem.n_outside == 0, "no vertex access outside the memory");
    finish_tb();
  end
endmodule
