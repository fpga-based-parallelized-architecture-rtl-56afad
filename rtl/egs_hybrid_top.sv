// egs_hybrid_top: the hybrid (parallel and pipelined) architecture of
// efficient graph-based image segmentation (Felzenszwalb-Huttenlocher).
//
// The IMG_W x IMG_H image is cut into NROW x NCOL tiles (n = NROW*NCOL
// sub-images). Each tile has its own tile_engine, and all tiles form their
// graphs, sort their edges and merge by threshold at the same time. Then one
// shared set of logic finishes the job on the whole image:
//   1. stitch_unit builds the seam edges (horizontal seams, then vertical
//      seams) and a threshold-mode pass of the shared seg_fsm merges across
//      them;
//   2. min-size passes of the same seg_fsm go over every tile's sorted edge
//      list (tile 0 first) and then over the seam edges, merging components
//      smaller than cfg_min_size;
//   3. recolor_unit streams out the segmented image, one pixel per out_valid
//      in raster order, with the segment's root label and colour.
// done pulses when the last pixel has been sent.
//
// Use: write every pixel through pix_we/pix_x/pix_y/pix_rgb (one per cycle,
// any order) while idle, set cfg_k (the constant k of tau(C) = k/|C|, also
// the initial threshold of every vertex) and cfg_min_size, pulse start.
// The image must already be smoothed. The stat_* outputs count merges by
// kind and the cycles from start to done.
//
// The default, 128 x 72 pixels in n = 8 tiles, is the smallest image of the
// paper's timing tables with its largest n. The 4 x 2 arrangement of the
// eight tiles is this design's choice; the paper shows only the 2 x 2 case.
// Vertex labels are tile_number * 2^LW + local_index + 1, so the shared
// logic finds a vertex's tile in the label's upper bits.
module egs_hybrid_top
  import egs_pkg::*;
#(
  parameter int unsigned IMG_W = 128,
  parameter int unsigned IMG_H = 72,
  parameter int unsigned NCOL  = 4,
  parameter int unsigned NROW  = 2,
  localparam int unsigned TW        = IMG_W / NCOL,
  localparam int unsigned TH        = IMG_H / NROW,
  localparam int unsigned NT        = NCOL * NROW,
  localparam int unsigned TIW       = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned NPIX      = TW * TH,
  localparam int unsigned LW        = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned T_EDGES   = (TW - 1) * TH + TW * (TH - 1) + 2 * (TW - 1) * (TH - 1),
  localparam int unsigned T_WORDS   = (T_EDGES + LANES - 1) / LANES,
  localparam int unsigned T_EAW     = (T_WORDS > 1) ? $clog2(T_WORDS) : 1,
  localparam int unsigned T_ECW     = $clog2(T_EDGES + 1),
  localparam int unsigned NUM_SEAM  = NROW * (NCOL - 1) * TH + (NROW - 1) * NCOL * TW,
  localparam int unsigned S_WORDS   = (NUM_SEAM + LANES - 1) / LANES,
  localparam int unsigned S_AW      = (S_WORDS > 1) ? $clog2(S_WORDS) : 1,
  localparam int unsigned S_CW      = $clog2(NUM_SEAM + 1),
  localparam int unsigned G_EDGES   = (T_EDGES > NUM_SEAM) ? T_EDGES : NUM_SEAM,
  localparam int unsigned G_WORDS   = (G_EDGES + LANES - 1) / LANES,
  localparam int unsigned G_EAW     = (G_WORDS > 1) ? $clog2(G_WORDS) : 1,
  localparam int unsigned G_ECW     = $clog2(G_EDGES + 1),
  localparam int unsigned XW        = $clog2(IMG_W + 1),
  localparam int unsigned YW        = $clog2(IMG_H + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration
  input  thr_t          cfg_k,
  input  size_t         cfg_min_size,
  // image load
  input  logic          pix_we,
  input  logic [XW-1:0] pix_x,
  input  logic [YW-1:0] pix_y,
  input  rgb_t          pix_rgb,
  // control
  input  logic          start,
  output logic          busy,
  output logic          done,
  // segmented image
  output logic          out_valid,
  output logic [XW-1:0] out_x,
  output logic [YW-1:0] out_y,
  output label_t        out_label,
  output rgb_t          out_rgb,
  // statistics
  output logic [31:0]   stat_thr_merges,
  output logic [31:0]   stat_stitch_merges,
  output logic [31:0]   stat_minsize_merges,
  output logic [31:0]   stat_cycles
);
  typedef enum logic [2:0] {
    G_IDLE, G_TILES, G_STITCH_GEN, G_STITCH_SEG, G_MINSIZE, G_RECOLOR
  } gstate_e;
  gstate_e gstate;

  // ------------------------------------------------------------------
  // tiles
  // ------------------------------------------------------------------
  logic                 t_done     [NT];
  logic                 t_finished [NT];
  logic [T_ECW-1:0]     t_num_edges[NT];
  logic [T_ECW-1:0]     t_merges   [NT];
  logic                 t_pix_we   [NT];
  logic                 t_p_rd_en  [NT];
  rgb_t                 t_p_rd_data[NT];
  logic                 t_e_rd_en  [NT];
  edge_word_t           t_e_rd_word[NT];
  logic                 t_v_rd_en  [NT];
  vertex_t              t_v_rd_data[NT];
  vertex_we_t           t_v_wr_we  [NT];

  logic [TIW-1:0] load_tile;
  logic [LW-1:0]  load_addr;
  logic           gsel;

  // shared pixel port (stitching)
  logic           st_p_rd_en;
  logic [TIW-1:0] st_p_rd_tile, st_p_tile_q;
  logic [LW-1:0]  st_p_rd_addr;

  // shared edge port (global seg_fsm)
  logic             g_e_rd_en;
  logic [G_EAW-1:0] g_e_rd_addr;
  edge_word_t       g_e_rd_word, seam_rd_word;
  logic [TIW:0]     src_q;              // 0..NT-1: tile edge list, NT: seam list

  // shared vertex port (global seg_fsm or recolour)
  logic       g_v_rd_en;
  label_t     g_v_rd_addr, g_v_wr_addr;
  vertex_we_t g_v_wr_we;
  vertex_t    g_v_rd_data, g_v_wr_data;
  logic [TIW-1:0] v_bank_q;

  always_comb begin
    load_tile = TIW'((32'(pix_y) / TH) * NCOL + 32'(pix_x) / TW);
    load_addr = LW'((32'(pix_y) % TH) * TW + 32'(pix_x) % TW);
  end

  for (genvar t = 0; t < NT; t++) begin : g_tile
    assign t_pix_we[t]  = pix_we && (load_tile == TIW'(t)) && !busy;
    assign t_p_rd_en[t] = st_p_rd_en && (st_p_rd_tile == TIW'(t));
    assign t_e_rd_en[t] = g_e_rd_en && (src_q == (TIW + 1)'(t));
    assign t_v_rd_en[t] = g_v_rd_en && (TIW'(g_v_rd_addr >> LW) == TIW'(t));
    assign t_v_wr_we[t] = (TIW'(g_v_wr_addr >> LW) == TIW'(t)) ? g_v_wr_we : '0;

    tile_engine #(.TW(TW), .TH(TH)) u_tile (
      .clk, .rst_n,
      .start(start && gstate == G_IDLE),
      .base(label_t'(t) << LW),
      .k(cfg_k),
      .done(t_done[t]), .finished(t_finished[t]),
      .num_edges(t_num_edges[t]), .merges(t_merges[t]),
      .pix_we(t_pix_we[t]), .pix_addr(load_addr), .pix_data(pix_rgb),
      .gsel,
      .g_p_rd_en(t_p_rd_en[t]), .g_p_rd_addr(st_p_rd_addr), .g_p_rd_data(t_p_rd_data[t]),
      .g_e_rd_en(t_e_rd_en[t]), .g_e_rd_addr(T_EAW'(g_e_rd_addr)), .g_e_rd_word(t_e_rd_word[t]),
      .g_v_rd_en(t_v_rd_en[t]), .g_v_rd_addr(LW'(g_v_rd_addr)), .g_v_rd_data(t_v_rd_data[t]),
      .g_v_wr_we(t_v_wr_we[t]), .g_v_wr_addr(LW'(g_v_wr_addr)), .g_v_wr_data(g_v_wr_data));
  end

  logic all_finished;
  always_comb begin
    all_finished = 1'b1;
    for (int t = 0; t < NT; t++) all_finished &= t_finished[t];
  end

  // read data of the shared ports: select by the bank addressed last cycle
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_p_tile_q <= '0;
      v_bank_q    <= '0;
    end else begin
      if (st_p_rd_en) st_p_tile_q <= st_p_rd_tile;
      if (g_v_rd_en)  v_bank_q    <= TIW'(g_v_rd_addr >> LW);
    end
  end

  rgb_t st_p_rd_data;
  always_comb begin
    st_p_rd_data = t_p_rd_data[st_p_tile_q];
    g_v_rd_data  = t_v_rd_data[v_bank_q];
    g_e_rd_word  = (src_q == (TIW + 1)'(NT)) ? seam_rd_word : t_e_rd_word[TIW'(src_q)];
  end

  // ------------------------------------------------------------------
  // stitching
  // ------------------------------------------------------------------
  logic              st_busy, st_done, st_wr_en;
  logic [S_CW-1:0]   st_num_edges;
  logic [LANE_W-1:0] st_wr_lane;
  logic [S_AW-1:0]   st_wr_addr;
  edge_t             st_wr_edge;

  stitch_unit #(.NCOL(NCOL), .NROW(NROW), .TW(TW), .TH(TH)) u_stitch (
    .clk, .rst_n, .start(gstate == G_TILES && all_finished),
    .busy(st_busy), .done(st_done), .num_edges(st_num_edges),
    .p_rd_en(st_p_rd_en), .p_rd_tile(st_p_rd_tile), .p_rd_addr(st_p_rd_addr),
    .p_rd_data(st_p_rd_data),
    .o_wr_en(st_wr_en), .o_wr_lane(st_wr_lane), .o_wr_addr(st_wr_addr), .o_wr_edge(st_wr_edge));

  edge_store #(.WORDS(S_WORDS)) u_seam_edges (
    .clk, .wr_en(st_wr_en), .wr_lane(st_wr_lane), .wr_addr(st_wr_addr), .wr_edge(st_wr_edge),
    .rd_en(g_e_rd_en && src_q == (TIW + 1)'(NT)), .rd_addr(S_AW'(g_e_rd_addr)),
    .rd_word(seam_rd_word));

  // ------------------------------------------------------------------
  // shared segmentation FSM (stitch merge and min-size merge)
  // ------------------------------------------------------------------
  logic             gs_start, gs_busy, gs_done, gs_v_rd_en;
  seg_mode_e        gs_mode;
  logic [G_ECW-1:0] gs_num_edges, gs_merges;
  label_t           gs_v_rd_addr, gs_v_wr_addr;
  vertex_we_t       gs_v_wr_we;
  vertex_t          gs_v_wr_data;
  logic             gs_started_q;

  always_comb begin
    gs_mode      = (gstate == G_MINSIZE) ? MODE_MINSIZE : MODE_THRESHOLD;
    gs_num_edges = (src_q == (TIW + 1)'(NT)) ? G_ECW'(st_num_edges) : G_ECW'(t_num_edges[TIW'(src_q)]);
    gs_start     = (gstate == G_STITCH_SEG || gstate == G_MINSIZE) && !gs_started_q;
  end

  seg_fsm #(.MAX_EDGES(G_EDGES)) u_gseg (
    .clk, .rst_n, .start(gs_start), .mode(gs_mode), .num_edges(gs_num_edges),
    .k(cfg_k), .min_size(cfg_min_size),
    .busy(gs_busy), .done(gs_done), .merges(gs_merges),
    .e_rd_en(g_e_rd_en), .e_rd_addr(g_e_rd_addr), .e_rd_word(g_e_rd_word),
    .v_rd_en(gs_v_rd_en), .v_rd_addr(gs_v_rd_addr), .v_rd_data(g_v_rd_data),
    .v_wr_we(gs_v_wr_we), .v_wr_addr(gs_v_wr_addr), .v_wr_data(gs_v_wr_data));

  // ------------------------------------------------------------------
  // recolouring
  // ------------------------------------------------------------------
  logic       rc_busy, rc_done, rc_rd_en;
  label_t     rc_rd_addr, rc_wr_addr;
  vertex_we_t rc_wr_we;
  vertex_t    rc_wr_data;

  recolor_unit #(.NCOL(NCOL), .NROW(NROW), .TW(TW), .TH(TH)) u_recolor (
    .clk, .rst_n, .start(gstate == G_MINSIZE && gs_done && src_q == (TIW + 1)'(NT)),
    .busy(rc_busy), .done(rc_done),
    .out_valid, .out_x, .out_y, .out_label, .out_rgb,
    .rd_en(rc_rd_en), .rd_addr(rc_rd_addr), .rd_data(g_v_rd_data),
    .wr_we(rc_wr_we), .wr_addr(rc_wr_addr), .wr_data(rc_wr_data));

  always_comb begin
    if (gstate == G_RECOLOR) begin
      g_v_rd_en = rc_rd_en;   g_v_rd_addr = rc_rd_addr;
      g_v_wr_we = rc_wr_we;   g_v_wr_addr = rc_wr_addr;   g_v_wr_data = rc_wr_data;
    end else begin
      g_v_rd_en = gs_v_rd_en; g_v_rd_addr = gs_v_rd_addr;
      g_v_wr_we = gs_v_wr_we; g_v_wr_addr = gs_v_wr_addr; g_v_wr_data = gs_v_wr_data;
    end
  end

  // ------------------------------------------------------------------
  // global sequencing
  // ------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gstate              <= G_IDLE;
      gsel                <= 1'b0;
      src_q               <= '0;
      gs_started_q        <= 1'b0;
      done                <= 1'b0;
      stat_thr_merges     <= '0;
      stat_stitch_merges  <= '0;
      stat_minsize_merges <= '0;
      stat_cycles         <= '0;
    end else begin
      done <= 1'b0;
      if (gstate != G_IDLE) stat_cycles <= stat_cycles + 1;
      unique case (gstate)
        G_IDLE: if (start) begin
          gsel                <= 1'b0;
          stat_thr_merges     <= '0;
          stat_stitch_merges  <= '0;
          stat_minsize_merges <= '0;
          stat_cycles         <= '0;
          gstate              <= G_TILES;
        end
        G_TILES: if (all_finished) begin
          logic [31:0] sum;
          sum = '0;
          for (int t = 0; t < NT; t++) sum += 32'(t_merges[t]);
          stat_thr_merges <= sum;
          gsel            <= 1'b1;
          gstate          <= G_STITCH_GEN;
        end
        G_STITCH_GEN: if (st_done) begin
          src_q        <= (TIW + 1)'(NT);
          gs_started_q <= 1'b0;
          gstate       <= G_STITCH_SEG;
        end
        G_STITCH_SEG: begin
          gs_started_q <= 1'b1;
          if (gs_done) begin
            stat_stitch_merges <= 32'(gs_merges);
            src_q              <= '0;
            gs_started_q       <= 1'b0;
            gstate             <= G_MINSIZE;
          end
        end
        G_MINSIZE: begin
          gs_started_q <= 1'b1;
          if (gs_done) begin
            stat_minsize_merges <= stat_minsize_merges + 32'(gs_merges);
            gs_started_q        <= 1'b0;
            if (src_q == (TIW + 1)'(NT)) gstate <= G_RECOLOR;
            else                         src_q  <= src_q + 1'b1;
          end
        end
        G_RECOLOR: if (rc_done) begin
          done   <= 1'b1;
          gsel   <= 1'b0;
          gstate <= G_IDLE;
        end
        default: gstate <= G_IDLE;
      endcase
    end
  end

  assign busy = (gstate != G_IDLE);

  initial begin
    assert (IMG_W % NCOL == 0 && IMG_H % NROW == 0)
      else $error("egs_hybrid_top: the image must split into whole tiles");
    assert (NT * (2 ** LW) < 2 ** LABEL_W)
      else $error("egs_hybrid_top: labels do not fit in LABEL_W bits");
  end
endmodule
