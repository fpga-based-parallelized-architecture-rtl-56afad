// edge_gen: formation of the graph of one (sub-)image. For every pixel Va it
// emits the edges to four neighbours - Vb1 above-right, Vb2 right, Vb3
// below-right and Vb4 below - instead of all eight, so that every
// undirected edge of the 8-connected grid appears once. The weight is the
// Euclidean distance of the two pixels in RGB space, rounded down to an
// integer (0..441).
//
// The pixels are read from an image BRAM (one cycle read latency) in raster
// order, address y*TW + x. Vertex labels are base + address + 1. For each
// pixel the centre is read once and each neighbour that lies inside the
// image is read and turned into an edge; edges leave on e_valid/e_edge one
// cycle after the neighbour's data arrives, in the order pixel by pixel,
// Vb1..Vb4. There is no back-pressure: the consumer takes one edge per
// cycle. An image of TW x TH pixels gives
//   (TW-1)*TH + TW*(TH-1) + 2*(TW-1)*(TH-1)
// edges in about 2 + 2*4 cycles per pixel. The integer rounding of the
// distance and the fixed serial order are this design's choices.
module edge_gen
  import egs_pkg::*;
#(
  parameter int unsigned TW = 32,
  parameter int unsigned TH = 36,
  localparam int unsigned NPIX = TW * TH,
  localparam int unsigned PAW  = (NPIX > 1) ? $clog2(NPIX) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  label_t         base,
  output logic           busy,
  output logic           done,
  // image BRAM read port
  output logic           p_rd_en,
  output logic [PAW-1:0] p_rd_addr,
  input  rgb_t           p_rd_data,
  // edge stream
  output logic           e_valid,
  output edge_t          e_edge
);
  typedef enum logic [2:0] {S_IDLE, S_RDC, S_CAPC, S_RDN, S_CAPN, S_NEXT} state_e;
  state_e state;

  localparam int unsigned XW = (TW > 1) ? $clog2(TW) : 1;
  localparam int unsigned YW = (TH > 1) ? $clog2(TH) : 1;

  logic [XW-1:0]  x_q;
  logic [YW-1:0]  y_q;
  logic [PAW-1:0] addr_q;      // address of the centre pixel
  logic [1:0]     n_q;         // neighbour 0..3 = Vb1..Vb4
  rgb_t           centre_q;
  logic           nb_ok;
  logic [PAW-1:0] nb_addr;

  // neighbour n of (x, y): Vb1 (x+1,y-1), Vb2 (x+1,y), Vb3 (x+1,y+1), Vb4 (x,y+1)
  always_comb begin
    logic right_ok, up_ok, down_ok;
    right_ok = (32'(x_q) < TW - 1);
    up_ok    = (y_q != '0);
    down_ok  = (32'(y_q) < TH - 1);
    unique case (n_q)
      2'd0: begin nb_ok = right_ok && up_ok;   nb_addr = addr_q - PAW'(TW) + 1'b1; end
      2'd1: begin nb_ok = right_ok;            nb_addr = addr_q + 1'b1;            end
      2'd2: begin nb_ok = right_ok && down_ok; nb_addr = addr_q + PAW'(TW) + 1'b1; end
      default: begin nb_ok = down_ok;          nb_addr = addr_q + PAW'(TW);        end
    endcase
  end

  logic [PAW-1:0] nb_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      x_q       <= '0;
      y_q       <= '0;
      addr_q    <= '0;
      n_q       <= '0;
      centre_q  <= '0;
      nb_addr_q <= '0;
      done      <= 1'b0;
      e_valid   <= 1'b0;
      e_edge    <= '0;
    end else begin
      done    <= 1'b0;
      e_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_q    <= '0;
          y_q    <= '0;
          addr_q <= '0;
          state  <= S_RDC;
        end
        S_RDC:  state <= S_CAPC;
        S_CAPC: begin
          centre_q <= p_rd_data;
          n_q      <= '0;
          state    <= S_RDN;
        end
        S_RDN: begin
          if (nb_ok) begin
            nb_addr_q <= nb_addr;
            state     <= S_CAPN;
          end else begin
            state <= S_NEXT;
          end
        end
        S_CAPN: begin
          e_valid   <= 1'b1;
          e_edge.va <= base + label_t'(addr_q) + label_t'(1);
          e_edge.vb <= base + label_t'(nb_addr_q) + label_t'(1);
          e_edge.w  <= rgb_dist(centre_q, p_rd_data);
          state     <= S_NEXT;
        end
        S_NEXT: begin
          if (n_q != 2'd3) begin
            n_q   <= n_q + 1'b1;
            state <= S_RDN;
          end else if (addr_q == PAW'(NPIX - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            addr_q <= addr_q + 1'b1;
            if (32'(x_q) == TW - 1) begin
              x_q <= '0;
              y_q <= y_q + 1'b1;
            end else begin
              x_q <= x_q + 1'b1;
            end
            state <= S_RDC;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    p_rd_en   = (state == S_RDC) || (state == S_RDN && nb_ok);
    p_rd_addr = (state == S_RDN) ? nb_addr : addr_q;
  end
endmodule
