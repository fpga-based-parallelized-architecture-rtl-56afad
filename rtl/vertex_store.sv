// vertex_store: the four vertex attribute BRAMs of one bank - label L (24 b),
// size S (24 b), rank R (24 b) and threshold t (8 b).
//
// Each attribute is its own simple dual-port BRAM, as in the sequential
// architecture. The four share one read address and one write address, so a
// read returns the whole vertex record one cycle after rd_en, and a write
// updates only the attributes whose bit in wr_we is set. Addresses are vertex
// numbers within the bank (label - 1 for a bank that starts at label 1).
// Sharing the addresses of the four BRAMs is this design's choice.
module vertex_store
  import egs_pkg::*;
#(
  parameter int unsigned DEPTH = 1152,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic       clk,
  input  vertex_we_t wr_we,
  input  logic [AW-1:0] wr_addr,
  input  vertex_t    wr_data,
  input  logic       rd_en,
  input  logic [AW-1:0] rd_addr,
  output vertex_t    rd_data
);
  sdp_bram #(.WIDTH(LABEL_W), .DEPTH(DEPTH)) u_label (
    .clk, .wr_en(wr_we.label), .wr_seg(1'b1), .wr_addr, .wr_data(wr_data.label),
    .rd_en, .rd_addr, .rd_data(rd_data.label));
  sdp_bram #(.WIDTH(SIZE_W), .DEPTH(DEPTH)) u_size (
    .clk, .wr_en(wr_we.size), .wr_seg(1'b1), .wr_addr, .wr_data(wr_data.size),
    .rd_en, .rd_addr, .rd_data(rd_data.size));
  sdp_bram #(.WIDTH(RANK_W), .DEPTH(DEPTH)) u_rank (
    .clk, .wr_en(wr_we.rank), .wr_seg(1'b1), .wr_addr, .wr_data(wr_data.rank),
    .rd_en, .rd_addr, .rd_data(rd_data.rank));
  sdp_bram #(.WIDTH(THR_W), .DEPTH(DEPTH)) u_thr (
    .clk, .wr_en(wr_we.thr), .wr_seg(1'b1), .wr_addr, .wr_data(wr_data.thr),
    .rd_en, .rd_addr, .rd_data(rd_data.thr));
endmodule
