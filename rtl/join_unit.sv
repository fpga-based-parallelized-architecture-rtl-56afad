// join_unit: JOIN - decides whether two components merge and, if they do,
// merges them by union by rank.
//
// Inputs are the two root labels la, lb found by FIND and the weight w of the
// edge that joins them. Following the JOIN diagram:
//   1. la == lb: same component, done without a merge.
//   2. The vertex records of both roots are read (t, R, S).
//   3. Merge test. Threshold mode (Eq. 2-5): merge when w <= t_a and
//      w <= t_b, where t holds Int(C) + k/|C|. Min-size mode: merge when
//      |C_a| < min_size or |C_b| < min_size.
//   4. The root of higher rank stays root; on equal ranks lb becomes the
//      root and its rank grows by one. The new size is S_a + S_b, the
//      divider forms k / size and the adder forms the new threshold
//      t = w + k/size (saturated to 8 bits). Rank, size and t of the new
//      root are written, then the other root's label is set to the new root.
// done pulses at the end, merged tells whether a merge took place.
//
// Timing: 4 cycles when la == lb or no merge (start, 2 reads, decision),
// about 34 cycles for a merge (24 of them in the divider). The divider runs
// in both modes, as the diagram has one datapath for both; the paper does
// not say whether min-size merging updates t. Saturating t and choosing lb
// as root on equal ranks are this design's choices.
module join_unit
  import egs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  seg_mode_e  mode,
  input  label_t     la,
  input  label_t     lb,
  input  weight_t    w,
  input  thr_t       k,
  input  size_t      min_size,
  output logic       busy,
  output logic       done,
  output logic       merged,
  // vertex memory port (address = vertex number = label - 1)
  output logic       rd_en,
  output label_t     rd_addr,
  input  vertex_t    rd_data,
  output vertex_we_t wr_we,
  output label_t     wr_addr,
  output vertex_t    wr_data
);
  typedef enum logic [2:0] {
    S_IDLE, S_RD_A, S_RD_B, S_DECIDE, S_DIV, S_WR_ROOT, S_WR_CHILD, S_DONE
  } state_e;
  state_e state;

  label_t    la_q, lb_q, root_q, child_q;
  weight_t   w_q;
  seg_mode_e mode_q;
  vertex_t   va_q;
  size_t     new_size_q;
  rank_t     new_rank_q;
  thr_t      new_thr_q;
  logic      merged_q;

  logic  div_start, div_busy, div_done;
  size_t div_q, div_r;
  logic  ok_thr, ok_size, a_is_root;

  seq_divider #(.WIDTH(SIZE_W)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(size_t'(k)), .divisor(new_size_q),
    .busy(div_busy), .done(div_done), .quotient(div_q), .remainder(div_r));

  // rd_data holds vertex B while in S_DECIDE, va_q holds vertex A.
  always_comb begin
    ok_thr    = (w_q <= WEIGHT_W'(va_q.thr)) && (w_q <= WEIGHT_W'(rd_data.thr));
    ok_size   = (va_q.size < min_size) || (rd_data.size < min_size);
    a_is_root = (va_q.rank > rd_data.rank);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      la_q       <= '0;
      lb_q       <= '0;
      root_q     <= '0;
      child_q    <= '0;
      w_q        <= '0;
      mode_q     <= MODE_THRESHOLD;
      va_q       <= '0;
      new_size_q <= '0;
      new_rank_q <= '0;
      new_thr_q  <= '0;
      merged_q   <= 1'b0;
      done       <= 1'b0;
      merged     <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          la_q     <= la;
          lb_q     <= lb;
          w_q      <= w;
          mode_q   <= mode;
          merged_q <= 1'b0;
          state    <= (la == lb) ? S_DONE : S_RD_A;
        end
        S_RD_A: state <= S_RD_B;
        S_RD_B: begin
          va_q  <= rd_data;          // record of la
          state <= S_DECIDE;
        end
        S_DECIDE: begin
          if ((mode_q == MODE_THRESHOLD) ? ok_thr : ok_size) begin
            merged_q   <= 1'b1;
            new_size_q <= va_q.size + rd_data.size;
            if (a_is_root) begin
              root_q     <= la_q;
              child_q    <= lb_q;
              new_rank_q <= va_q.rank;
            end else begin
              root_q     <= lb_q;
              child_q    <= la_q;
              new_rank_q <= (va_q.rank == rd_data.rank) ? rd_data.rank + 1'b1 : rd_data.rank;
            end
            state <= S_DIV;
          end else begin
            state <= S_DONE;
          end
        end
        S_DIV: if (div_done) begin
          new_thr_q <= sat_thr({1'b0, label_t'(w_q)} + {1'b0, div_q});
          state     <= S_WR_ROOT;
        end
        S_WR_ROOT:  state <= S_WR_CHILD;
        S_WR_CHILD: state <= S_DONE;
        S_DONE: begin
          done   <= 1'b1;
          merged <= merged_q;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The divider is started on the cycle the state enters S_DIV.
  logic div_started_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) div_started_q <= 1'b0;
    else        div_started_q <= (state == S_DIV);
  end
  assign div_start = (state == S_DIV) && !div_started_q;

  always_comb begin
    busy    = (state != S_IDLE);
    rd_en   = (state == S_RD_A) || (state == S_RD_B);
    rd_addr = ((state == S_RD_A) ? la_q : lb_q) - label_t'(1);
    wr_we   = '0;
    wr_data = '0;
    wr_addr = root_q - label_t'(1);
    if (state == S_WR_ROOT) begin
      wr_we.size   = 1'b1;
      wr_we.rank   = 1'b1;
      wr_we.thr    = 1'b1;
      wr_data.size = new_size_q;
      wr_data.rank = new_rank_q;
      wr_data.thr  = new_thr_q;
    end else if (state == S_WR_CHILD) begin
      wr_we.label   = 1'b1;
      wr_addr       = child_q - label_t'(1);
      wr_data.label = root_q;
    end
  end

  a_no_self_join: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_WR_CHILD) |-> (root_q != child_q));
endmodule
