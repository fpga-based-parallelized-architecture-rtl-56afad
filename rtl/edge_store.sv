// edge_store: the three edge BRAMs Va (96 b), Vb (96 b) and W (64 b).
//
// Each BRAM address holds four edges ("each address of BRAM corresponds to
// four data segments"): lane i of Va, Vb and W together form edge 4*addr+i.
// The write port stores one edge into one lane; the read port returns all
// four edges of an address one cycle after rd_en, and the segmentation FSM
// then steps through the lanes with its counter. Writing one lane at a time
// is this design's choice.
module edge_store
  import egs_pkg::*;
#(
  parameter int unsigned WORDS = 1102,
  localparam int unsigned AW   = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic              clk,
  input  logic              wr_en,
  input  logic [LANE_W-1:0] wr_lane,
  input  logic [AW-1:0]     wr_addr,
  input  edge_t             wr_edge,
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output edge_word_t        rd_word
);
  logic [LANES-1:0]          seg;
  logic [LANES*LABEL_W-1:0]  va_w, vb_w, va_r, vb_r;
  logic [LANES*WEIGHT_W-1:0] w_w, w_r;

  always_comb begin
    seg = '0;
    seg[wr_lane] = 1'b1;
    va_w = {LANES{wr_edge.va}};
    vb_w = {LANES{wr_edge.vb}};
    w_w  = {LANES{wr_edge.w}};
    for (int i = 0; i < LANES; i++) begin
      rd_word[i].va = va_r[i*LABEL_W +: LABEL_W];
      rd_word[i].vb = vb_r[i*LABEL_W +: LABEL_W];
      rd_word[i].w  = w_r[i*WEIGHT_W +: WEIGHT_W];
    end
  end

  sdp_bram #(.WIDTH(LANES*LABEL_W), .DEPTH(WORDS), .NSEG(LANES)) u_va (
    .clk, .wr_en, .wr_seg(seg), .wr_addr, .wr_data(va_w), .rd_en, .rd_addr, .rd_data(va_r));
  sdp_bram #(.WIDTH(LANES*LABEL_W), .DEPTH(WORDS), .NSEG(LANES)) u_vb (
    .clk, .wr_en, .wr_seg(seg), .wr_addr, .wr_data(vb_w), .rd_en, .rd_addr, .rd_data(vb_r));
  sdp_bram #(.WIDTH(LANES*WEIGHT_W), .DEPTH(WORDS), .NSEG(LANES)) u_w (
    .clk, .wr_en, .wr_seg(seg), .wr_addr, .wr_data(w_w), .rd_en, .rd_addr, .rd_data(w_r));
endmodule
