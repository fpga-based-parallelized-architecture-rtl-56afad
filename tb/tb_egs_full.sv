// tb_egs_full: end-to-end test of egs_hybrid_top at its default size - a
// 128 x 72 image in n = 8 tiles (4 x 2) - through one complete
// segmentation. The test itself is in egs_e2e_body.svh.
module tb_egs_full;
  import egs_pkg::*;
  localparam int IMG_W    = 128;
  localparam int IMG_H    = 72;
  localparam int NCOL     = 4;
  localparam int NROW     = 2;
  localparam int K        = 20;
  localparam int MIN_SIZE = 20;
  localparam int SEED     = 11;
  localparam int WATCHDOG = 20000000;

  thr_t  cfg_k;
  size_t cfg_min_size;
  logic  pix_we, start, busy, done, out_valid;
  logic [$clog2(IMG_W+1)-1:0] pix_x, out_x;
  logic [$clog2(IMG_H+1)-1:0] pix_y, out_y;
  rgb_t   pix_rgb, out_rgb;
  label_t out_label;
  logic [31:0] stat_thr_merges, stat_stitch_merges, stat_minsize_merges, stat_cycles;

  egs_hybrid_top dut (.*);

  `include "egs_e2e_body.svh"
endmodule
