// edge_sort: sorts the edges of one (sub-)image into non-decreasing weight
// order and writes them, four per address, into the Va/Vb/W BRAMs.
//
// The paper asks only for the order, not for a sorting method. Because edge
// weights are small integers (0..441), this module uses a counting sort,
// which is stable and takes a fixed number of cycles:
//   clear  - the NBINS-entry histogram is cleared (NBINS cycles), then
//            ready rises;
//   fill   - every incoming edge is stored in a staging BRAM in arrival
//            order and the histogram bin of its weight is incremented;
//   prefix - in_done ends the fill and each bin is replaced by the number of
//            edges of smaller weight (NBINS cycles);
//   place  - the staging BRAM is read back in order; each edge goes to the
//            position held by its bin, and the bin is incremented
//            (2 cycles per edge).
// done pulses after the last write; count holds the number of edges.
// Position p is written to address p/4, lane p%4 of the edge BRAMs. The
// histogram is a small register-file memory with asynchronous read. Weights
// at or above NBINS would be sorted into the last bin, which the assertion
// flags; edge_gen never produces them.
module edge_sort
  import egs_pkg::*;
#(
  parameter int unsigned MAX_EDGES = 4406,
  parameter int unsigned NBINS     = 512,
  localparam int unsigned WORDS    = (MAX_EDGES + LANES - 1) / LANES,
  localparam int unsigned EAW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned ECW      = $clog2(MAX_EDGES + 1),
  localparam int unsigned SAW      = (MAX_EDGES > 1) ? $clog2(MAX_EDGES) : 1,
  localparam int unsigned BW       = $clog2(NBINS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              ready,
  input  logic              in_valid,
  input  edge_t             in_edge,
  input  logic              in_done,
  output logic              busy,
  output logic              done,
  output logic [ECW-1:0]    count,
  // sorted output into the edge BRAMs
  output logic              o_wr_en,
  output logic [LANE_W-1:0] o_wr_lane,
  output logic [EAW-1:0]    o_wr_addr,
  output edge_t             o_wr_edge
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_FILL, S_PREFIX, S_RD, S_PLACE} state_e;
  state_e state;

  logic [ECW-1:0] hist [NBINS];
  logic [BW-1:0]  bin_q;
  logic [ECW-1:0] run_q, idx_q;
  edge_t          st_rd;
  logic           st_rd_en;
  logic [BW-1:0]  in_bin, st_bin;

  function automatic logic [BW-1:0] bin_of(input weight_t w);
    return (32'(w) >= NBINS) ? BW'(NBINS - 1) : BW'(w);
  endfunction

  assign in_bin = bin_of(in_edge.w);
  assign st_bin = bin_of(st_rd.w);

  sdp_bram #(.WIDTH($bits(edge_t)), .DEPTH(MAX_EDGES)) u_stage (
    .clk, .wr_en((state == S_FILL) && in_valid), .wr_seg(1'b1), .wr_addr(SAW'(count)),
    .wr_data(in_edge), .rd_en(st_rd_en), .rd_addr(SAW'(idx_q)), .rd_data(st_rd));

  always_ff @(posedge clk) begin
    unique case (state)
      S_CLEAR:  hist[bin_q] <= '0;
      S_FILL:   if (in_valid) hist[in_bin] <= hist[in_bin] + 1'b1;
      S_PREFIX: hist[bin_q] <= run_q;
      S_PLACE:  hist[st_bin] <= hist[st_bin] + 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bin_q <= '0;
      run_q <= '0;
      idx_q <= '0;
      count <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          bin_q <= '0;
          count <= '0;
          state <= S_CLEAR;
        end
        S_CLEAR: begin
          bin_q <= bin_q + 1'b1;
          if (bin_q == BW'(NBINS - 1)) state <= S_FILL;
        end
        S_FILL: begin
          if (in_valid) count <= count + 1'b1;
          if (in_done) begin
            bin_q <= '0;
            run_q <= '0;
            state <= S_PREFIX;
          end
        end
        S_PREFIX: begin
          run_q <= run_q + hist[bin_q];
          bin_q <= bin_q + 1'b1;
          if (bin_q == BW'(NBINS - 1)) begin
            idx_q <= '0;
            if (count == '0) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              state <= S_RD;
            end
          end
        end
        S_RD: state <= S_PLACE;
        S_PLACE: begin
          if (idx_q == count - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            idx_q <= idx_q + 1'b1;
            state <= S_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    logic [ECW-1:0] pos;
    pos       = hist[st_bin];
    ready     = (state == S_FILL);
    busy      = (state != S_IDLE);
    st_rd_en  = (state == S_RD);
    o_wr_en   = (state == S_PLACE);
    o_wr_lane = pos[LANE_W-1:0];
    o_wr_addr = EAW'(pos >> LANE_W);
    o_wr_edge = st_rd;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FILL && in_valid) |-> (32'(count) < MAX_EDGES));
  a_weight_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_FILL && in_valid) |-> (32'(in_edge.w) < NBINS));
endmodule
