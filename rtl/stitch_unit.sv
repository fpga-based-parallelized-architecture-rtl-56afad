// stitch_unit: builds the edges along which the separately segmented
// sub-images are joined - horizontal stitching first, then vertical.
//
// The image is split into NROW x NCOL tiles of TW x TH pixels, tile number
// r*NCOL + c. Horizontal stitching compares the rightmost column of each
// tile with the leftmost column of the tile to its right; vertical
// stitching compares the bottom row of each tile with the top row of the
// tile below. Since each tile has already been merged by threshold, only one
// neighbour is used across a seam: Va-Vb2 (the pixel straight across) for a
// vertical seam line and Va-Vb4 (straight below) for a horizontal one; the
// diagonal edges across the seams are left out, as the paper describes.
//
// The unit reads both pixels of each seam edge through a shared pixel read
// port (tile number and local address; one cycle of latency), computes the
// Euclidean RGB weight and writes the edge into the seam edge BRAMs, four
// per address, in generation order: all horizontal seams (tile row by tile
// row, seam by seam, top to bottom), then all vertical seams (left to right).
// The edges are not sorted; the paper does not say that they are. done
// pulses after the last of NUM_SEAM edges is written, 5 cycles per edge.
// The merging along these edges is done by a threshold-mode pass of the
// shared seg_fsm.
module stitch_unit
  import egs_pkg::*;
#(
  parameter int unsigned NCOL = 4,
  parameter int unsigned NROW = 2,
  parameter int unsigned TW   = 32,
  parameter int unsigned TH   = 36,
  localparam int unsigned NT       = NCOL * NROW,
  localparam int unsigned TIW      = (NT > 1) ? $clog2(NT) : 1,
  localparam int unsigned LW       = (TW * TH > 1) ? $clog2(TW * TH) : 1,
  localparam int unsigned NUM_H    = NROW * (NCOL - 1) * TH,
  localparam int unsigned NUM_V    = (NROW - 1) * NCOL * TW,
  localparam int unsigned NUM_SEAM = NUM_H + NUM_V,
  localparam int unsigned SWORDS   = (NUM_SEAM + LANES - 1) / LANES,
  localparam int unsigned SAW      = (SWORDS > 1) ? $clog2(SWORDS) : 1,
  localparam int unsigned SCW      = $clog2(NUM_SEAM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [SCW-1:0]    num_edges,
  // shared pixel read port
  output logic              p_rd_en,
  output logic [TIW-1:0]    p_rd_tile,
  output logic [LW-1:0]     p_rd_addr,
  input  rgb_t              p_rd_data,
  // seam edge BRAM write port
  output logic              o_wr_en,
  output logic [LANE_W-1:0] o_wr_lane,
  output logic [SAW-1:0]    o_wr_addr,
  output edge_t             o_wr_edge
);
  typedef enum logic [2:0] {S_IDLE, S_RD_A, S_CAP_A, S_RD_B, S_CAP_B, S_NEXT} state_e;
  state_e state;

  logic           vert_q;                // 0: horizontal seams, 1: vertical seams
  logic [31:0]    r_q, c_q, j_q;         // tile row, tile column, position on seam
  logic [SCW-1:0] cnt_q;
  rgb_t           pa_q;
  logic [TIW-1:0] ta, tb;
  logic [LW-1:0]  aa, ab;
  logic           last_c, last_r, last_j;

  // the two pixels of the current seam edge
  always_comb begin
    if (!vert_q) begin
      ta = TIW'(r_q * NCOL + c_q);
      tb = TIW'(r_q * NCOL + c_q + 1);
      aa = LW'(j_q * TW + (TW - 1));
      ab = LW'(j_q * TW);
      last_j = (j_q == TH - 1);
      last_c = (c_q == NCOL - 2);
    end else begin
      ta = TIW'(r_q * NCOL + c_q);
      tb = TIW'((r_q + 1) * NCOL + c_q);
      aa = LW'((TH - 1) * TW + j_q);
      ab = LW'(j_q);
      last_j = (j_q == TW - 1);
      last_c = (c_q == NCOL - 1);
    end
    last_r = vert_q ? (r_q == NROW - 2) : (r_q == NROW - 1);
  end

  function automatic label_t label_of(input logic [TIW-1:0] t, input logic [LW-1:0] a);
    return (label_t'(t) << LW) + label_t'(a) + label_t'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      vert_q <= 1'b0;
      r_q    <= '0;
      c_q    <= '0;
      j_q    <= '0;
      cnt_q  <= '0;
      pa_q   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          vert_q <= (NUM_H == 0);
          r_q    <= '0;
          c_q    <= '0;
          j_q    <= '0;
          cnt_q  <= '0;
          if (NUM_SEAM == 0) done  <= 1'b1;
          else               state <= S_RD_A;
        end
        S_RD_A:  state <= S_CAP_A;
        S_CAP_A: begin
          pa_q  <= p_rd_data;
          state <= S_RD_B;
        end
        S_RD_B:  state <= S_CAP_B;
        S_CAP_B: begin
          cnt_q <= cnt_q + 1'b1;
          state <= S_NEXT;
        end
        S_NEXT: begin
          state <= S_RD_A;
          if (!last_j) begin
            j_q <= j_q + 1;
          end else begin
            j_q <= '0;
            if (!last_c) begin
              c_q <= c_q + 1;
            end else begin
              c_q <= '0;
              if (!last_r) begin
                r_q <= r_q + 1;
              end else begin
                r_q <= '0;
                if (!vert_q && NUM_V != 0) begin
                  vert_q <= 1'b1;
                end else begin
                  done  <= 1'b1;
                  state <= S_IDLE;
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    num_edges = SCW'(NUM_SEAM);
    p_rd_en   = (state == S_RD_A) || (state == S_RD_B);
    p_rd_tile = (state == S_RD_B) ? tb : ta;
    p_rd_addr = (state == S_RD_B) ? ab : aa;
    o_wr_en   = (state == S_CAP_B);
    o_wr_lane = cnt_q[LANE_W-1:0];
    o_wr_addr = SAW'(cnt_q >> LANE_W);
    o_wr_edge.va = label_of(ta, aa);
    o_wr_edge.vb = label_of(tb, ab);
    o_wr_edge.w  = rgb_dist(pa_q, p_rd_data);
  end
endmodule
