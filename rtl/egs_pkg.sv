// egs_pkg: widths, record types and constants shared by the graph-based
// image segmentation datapath.
//
// The field widths follow the BRAM widths of the sequential architecture's
// block diagram: label, size and rank are 24 bits, the per-component
// threshold t is 8 bits and an edge weight W is 16 bits. Vertex numbers are
// stored as labels, which count from 1 (label = vertex index + 1), so a BRAM
// address is always "label - 1", as in the FIND and JOIN diagrams.
// The edge record, the vertex record and the segmentation mode enum are this
// design's own packaging of those fields.
package egs_pkg;

  localparam int unsigned LABEL_W  = 24;  // label / vertex number
  localparam int unsigned SIZE_W   = 24;  // component size |C|
  localparam int unsigned RANK_W   = 24;  // union-by-rank rank
  localparam int unsigned THR_W    = 8;   // component threshold t
  localparam int unsigned WEIGHT_W = 16;  // edge weight W
  localparam int unsigned LANES    = 4;   // edges per edge-BRAM address
  localparam int unsigned LANE_W   = 2;   // $clog2(LANES)

  // Largest weight the edge generator can produce: floor(sqrt(3*255^2)).
  localparam int unsigned WEIGHT_MAX = 441;

  typedef logic [7:0] chan_t;

  typedef struct packed {
    chan_t r;
    chan_t g;
    chan_t b;
  } rgb_t;

  typedef logic [LABEL_W-1:0]  label_t;
  typedef logic [SIZE_W-1:0]   size_t;
  typedef logic [RANK_W-1:0]   rank_t;
  typedef logic [THR_W-1:0]    thr_t;
  typedef logic [WEIGHT_W-1:0] weight_t;

  // One undirected weighted edge (Va, Vb, W).
  typedef struct packed {
    label_t  va;
    label_t  vb;
    weight_t w;
  } edge_t;

  // One BRAM address of the edge memories: four edges.
  typedef edge_t [LANES-1:0] edge_word_t;

  // The four attributes every vertex carries.
  typedef struct packed {
    label_t label;
    size_t  size;
    rank_t  rank;
    thr_t   thr;
  } vertex_t;

  // Per-field write enables of the four vertex BRAMs.
  typedef struct packed {
    logic label;
    logic size;
    logic rank;
    logic thr;
  } vertex_we_t;

  // Merge criterion applied by JOIN.
  typedef enum logic {
    MODE_THRESHOLD = 1'b0,  // merge if W <= t(Ca) and W <= t(Cb)   (Eq. 2-5)
    MODE_MINSIZE   = 1'b1   // merge if |Ca| < min_size or |Cb| < min_size
  } seg_mode_e;

  // Saturating 8-bit threshold t = W + k/|C|.
  function automatic thr_t sat_thr(input logic [LABEL_W:0] v);
    return (v > (2**THR_W - 1)) ? thr_t'(2**THR_W - 1) : thr_t'(v);
  endfunction

  // Floor of the Euclidean distance of two RGB colours.
  function automatic weight_t rgb_dist(input rgb_t a, input rgb_t b);
    logic signed [9:0] dr, dg, db;
    logic [19:0] sq;
    logic [19:0] rem, root, trial;
    dr = $signed({2'b00, a.r}) - $signed({2'b00, b.r});
    dg = $signed({2'b00, a.g}) - $signed({2'b00, b.g});
    db = $signed({2'b00, a.b}) - $signed({2'b00, b.b});
    sq = 20'(dr * dr) + 20'(dg * dg) + 20'(db * db);
    // digit-by-digit integer square root
    rem  = sq;
    root = '0;
    for (int i = 9; i >= 0; i--) begin
      trial = root + (20'd1 << (2 * i));
      if (rem >= trial) begin
        rem  = rem - trial;
        root = (root >> 1) + (20'd1 << (2 * i));
      end else begin
        root = root >> 1;
      end
    end
    return weight_t'(root);
  endfunction

endpackage
