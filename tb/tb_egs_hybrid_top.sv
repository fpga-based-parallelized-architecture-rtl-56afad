// tb_egs_hybrid_top: end-to-end test of the hybrid architecture at a
// reduced size - a 32 x 24 image in 2 x 2 tiles, the four-part split the
// paper illustrates. The test itself is in egs_e2e_body.svh.
module tb_egs_hybrid_top;
  import egs_pkg::*;
  localparam int IMG_W    = 32;
  localparam int IMG_H    = 24;
  localparam int NCOL     = 2;
  localparam int NROW     = 2;
  localparam int K        = 20;
  localparam int MIN_SIZE = 6;
  localparam int SEED     = 7;
  localparam int WATCHDOG = 400000;

  thr_t  cfg_k;
  size_t cfg_min_size;
  logic  pix_we, start, busy, done, out_valid;
  logic [$clog2(IMG_W+1)-1:0] pix_x, out_x;
  logic [$clog2(IMG_H+1)-1:0] pix_y, out_y;
  rgb_t   pix_rgb, out_rgb;
  label_t out_label;
  logic [31:0] stat_thr_merges, stat_stitch_merges, stat_minsize_merges, stat_cycles;

  egs_hybrid_top #(.IMG_W(IMG_W), .IMG_H(IMG_H), .NCOL(NCOL), .NROW(NROW)) dut (.*);

  `include "egs_e2e_body.svh"
endmodule
