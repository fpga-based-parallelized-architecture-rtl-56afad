// tile_engine: everything one sub-image goes through on its own in the hybrid
// architecture - graph initialisation, graph formation, sorting and the
// threshold-based graph agglomeration.
//
// It holds the sub-image's pixel BRAM, its seven BRAMs (Va, Vb, W in
// edge_store; L, S, R, t in vertex_store) and one copy of each processing
// module. After start:
//   1. vertex_init fills L/S/R/t while, at the same time, edge_sort clears
//      its histogram and edge_gen streams the edges into it (the pipelined
//      architecture overlaps BRAM initialisation with graph formation);
//   2. edge_sort writes the sorted edges into the Va/Vb/W BRAMs;
//   3. seg_fsm makes one threshold-mode pass over them;
// then done pulses and finished stays high. All labels this tile hands out
// are base + local vertex number + 1, base being tile_number * 2^LW, so the
// tiles' labels never collide.
//
// When gsel is high (after finished) the pixel BRAM's read port, the edge
// BRAM read port and the vertex BRAM ports are given to the outside, so
// that the shared stitching, min-size and recolouring logic can use them.
// The pixel BRAM's write port is always outside; it is written before
// start. Only the local address bits are used on the g_* ports.
module tile_engine
  import egs_pkg::*;
#(
  parameter int unsigned TW = 32,
  parameter int unsigned TH = 36,
  localparam int unsigned NPIX      = TW * TH,
  localparam int unsigned LW        = (NPIX > 1) ? $clog2(NPIX) : 1,
  localparam int unsigned MAX_EDGES = (TW - 1) * TH + TW * (TH - 1) + 2 * (TW - 1) * (TH - 1),
  localparam int unsigned WORDS     = (MAX_EDGES + LANES - 1) / LANES,
  localparam int unsigned EAW       = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned ECW       = $clog2(MAX_EDGES + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  label_t         base,
  input  thr_t           k,
  output logic           done,
  output logic           finished,
  output logic [ECW-1:0] num_edges,
  output logic [ECW-1:0] merges,
  // pixel BRAM write port
  input  logic           pix_we,
  input  logic [LW-1:0]  pix_addr,
  input  rgb_t           pix_data,
  // ports handed to the shared logic when gsel = 1
  input  logic           gsel,
  input  logic           g_p_rd_en,
  input  logic [LW-1:0]  g_p_rd_addr,
  output rgb_t           g_p_rd_data,
  input  logic           g_e_rd_en,
  input  logic [EAW-1:0] g_e_rd_addr,
  output edge_word_t     g_e_rd_word,
  input  logic           g_v_rd_en,
  input  logic [LW-1:0]  g_v_rd_addr,
  output vertex_t        g_v_rd_data,
  input  vertex_we_t     g_v_wr_we,
  input  logic [LW-1:0]  g_v_wr_addr,
  input  vertex_t        g_v_wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_GRAPH, S_SORT, S_SEG, S_DONE} state_e;
  state_e state;
  logic   init_done_q;

  // --- sub-module wiring ---
  logic           vi_busy, vi_done;
  vertex_we_t     vi_we;
  logic [LW-1:0]  vi_addr;
  vertex_t        vi_data;

  logic           eg_busy, eg_done, eg_valid, p_rd_en_l;
  logic [LW-1:0]  p_rd_addr_l;
  edge_t          eg_edge;
  rgb_t           p_rd_data;

  logic           so_ready, so_busy, so_done, so_wr_en;
  logic [LANE_W-1:0] so_wr_lane;
  logic [EAW-1:0] so_wr_addr;
  edge_t          so_wr_edge;

  logic           sf_busy, sf_done, sf_e_rd_en, sf_v_rd_en;
  logic [EAW-1:0] sf_e_rd_addr;
  label_t         sf_v_rd_addr, sf_v_wr_addr;
  vertex_we_t     sf_v_wr_we;
  vertex_t        sf_v_wr_data, v_rd_data;
  edge_word_t     e_rd_word;

  logic           vs_rd_en;
  logic [LW-1:0]  vs_rd_addr, vs_wr_addr;
  vertex_we_t     vs_wr_we;
  vertex_t        vs_wr_data;

  vertex_init #(.COUNT(NPIX)) u_init (
    .clk, .rst_n, .start(start && state == S_IDLE), .base, .k,
    .busy(vi_busy), .done(vi_done), .wr_we(vi_we), .wr_addr(vi_addr), .wr_data(vi_data));

  sdp_bram #(.WIDTH($bits(rgb_t)), .DEPTH(NPIX)) u_pix (
    .clk, .wr_en(pix_we), .wr_seg(1'b1), .wr_addr(pix_addr), .wr_data(pix_data),
    .rd_en(gsel ? g_p_rd_en : p_rd_en_l), .rd_addr(gsel ? g_p_rd_addr : p_rd_addr_l),
    .rd_data(p_rd_data));
  assign g_p_rd_data = p_rd_data;

  edge_gen #(.TW(TW), .TH(TH)) u_gen (
    .clk, .rst_n, .start(state == S_CLEAR && so_ready), .base,
    .busy(eg_busy), .done(eg_done),
    .p_rd_en(p_rd_en_l), .p_rd_addr(p_rd_addr_l), .p_rd_data,
    .e_valid(eg_valid), .e_edge(eg_edge));

  edge_sort #(.MAX_EDGES(MAX_EDGES)) u_sort (
    .clk, .rst_n, .start(start && state == S_IDLE), .ready(so_ready),
    .in_valid(eg_valid), .in_edge(eg_edge), .in_done(state == S_GRAPH && eg_done && !eg_valid),
    .busy(so_busy), .done(so_done), .count(num_edges),
    .o_wr_en(so_wr_en), .o_wr_lane(so_wr_lane), .o_wr_addr(so_wr_addr), .o_wr_edge(so_wr_edge));

  edge_store #(.WORDS(WORDS)) u_edges (
    .clk, .wr_en(so_wr_en), .wr_lane(so_wr_lane), .wr_addr(so_wr_addr), .wr_edge(so_wr_edge),
    .rd_en(gsel ? g_e_rd_en : sf_e_rd_en), .rd_addr(gsel ? g_e_rd_addr : sf_e_rd_addr),
    .rd_word(e_rd_word));
  assign g_e_rd_word = e_rd_word;

  seg_fsm #(.MAX_EDGES(MAX_EDGES)) u_seg (
    .clk, .rst_n, .start(state == S_SORT && so_done), .mode(MODE_THRESHOLD),
    .num_edges, .k, .min_size('0),
    .busy(sf_busy), .done(sf_done), .merges,
    .e_rd_en(sf_e_rd_en), .e_rd_addr(sf_e_rd_addr), .e_rd_word(e_rd_word),
    .v_rd_en(sf_v_rd_en), .v_rd_addr(sf_v_rd_addr), .v_rd_data(v_rd_data),
    .v_wr_we(sf_v_wr_we), .v_wr_addr(sf_v_wr_addr), .v_wr_data(sf_v_wr_data));

  // vertex BRAM port owner: initialisation, the tile's FSM, or the outside
  always_comb begin
    if (gsel) begin
      vs_rd_en = g_v_rd_en;  vs_rd_addr = g_v_rd_addr;
      vs_wr_we = g_v_wr_we;  vs_wr_addr = g_v_wr_addr;  vs_wr_data = g_v_wr_data;
    end else if (vi_busy) begin
      vs_rd_en = 1'b0;       vs_rd_addr = '0;
      vs_wr_we = vi_we;      vs_wr_addr = vi_addr;      vs_wr_data = vi_data;
    end else begin
      vs_rd_en = sf_v_rd_en; vs_rd_addr = LW'(sf_v_rd_addr);
      vs_wr_we = sf_v_wr_we; vs_wr_addr = LW'(sf_v_wr_addr); vs_wr_data = sf_v_wr_data;
    end
  end

  vertex_store #(.DEPTH(NPIX)) u_vertices (
    .clk, .wr_we(vs_wr_we), .wr_addr(vs_wr_addr), .wr_data(vs_wr_data),
    .rd_en(vs_rd_en), .rd_addr(vs_rd_addr), .rd_data(v_rd_data));
  assign g_v_rd_data = v_rd_data;

  // --- sequencing ---
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      init_done_q <= 1'b0;
      done        <= 1'b0;
      finished    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (vi_done) init_done_q <= 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          init_done_q <= 1'b0;
          finished    <= 1'b0;
          state       <= S_CLEAR;
        end
        S_CLEAR: if (so_ready) state <= S_GRAPH;
        S_GRAPH: if (eg_done && !eg_valid) state <= S_SORT;
        S_SORT:  if (so_done) state <= S_SEG;
        S_SEG:   if (sf_done) state <= S_DONE;
        S_DONE:  if (init_done_q) begin
          done     <= 1'b1;
          finished <= 1'b1;
          state    <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The threshold pass must not start before the vertex BRAMs are set up,
  // and the tile FSM only touches its own vertices.
  a_init_first: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SORT && so_done) |-> (init_done_q || vi_done));
  a_own_bank: assert property (@(posedge clk) disable iff (!rst_n)
    (!gsel && sf_v_rd_en) |-> ((sf_v_rd_addr >> LW) == (base >> LW)));
endmodule
