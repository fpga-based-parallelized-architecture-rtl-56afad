// seg_fsm: the finite state machine for segmentation. It walks a sorted edge
// list once and, for every edge (Va, Vb, W), finds the two roots and lets
// JOIN merge them.
//
// Structure, as in the FSM diagram: an address register selects a word of
// the Va/Vb/W BRAMs; a 2-bit lane counter drives the three 4:1 multiplexers
// that pick one edge out of the four held at that address; FIND Va and
// FIND Vb produce the two roots; both roots and W go to JOIN; JOIN's done
// updates the counter and address; a comparator against the number of
// edges ends the walk with done. The same module is the threshold-based FSM
// (mode = MODE_THRESHOLD) and the analogous min-size FSM (MODE_MINSIZE).
//
// FIND Va and FIND Vb are independent, so they run together, as the
// pipelined architecture does. The vertex memory has one read port, but a
// FIND uses it only every other cycle (read, then compare), and its
// write-back also falls one cycle after a compare. FIND Vb is therefore
// started one cycle after FIND Va: from then on Va owns the odd cycles and
// Vb the even ones, for reads and write-backs alike, so the two never
// collide and need no arbiter (assertions check this). A FIND that reads a
// vertex the other one is compressing sees either its old parent or its
// root, and both lead to the same root, so the result equals the
// sequential order. JOIN starts when both roots are known.
//
// Interface: start with num_edges (edges 0..num_edges-1 are read, the last
// word may be partly used); an edge-BRAM read port (one cycle latency); one
// vertex-memory port shared by FIND Va, FIND Vb and JOIN (addresses are
// vertex numbers, label - 1). merges counts the joins that merged since
// start. done pulses once when the walk is over.
//
// Timing per edge: 2 cycles per new BRAM word, then the longer of FIND Va
// and FIND Vb plus one cycle, JOIN, and one cycle of bookkeeping.
module seg_fsm
  import egs_pkg::*;
#(
  parameter int unsigned MAX_EDGES = 4406,
  localparam int unsigned WORDS    = (MAX_EDGES + LANES - 1) / LANES,
  localparam int unsigned EAW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int unsigned ECW      = $clog2(MAX_EDGES + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  seg_mode_e      mode,
  input  logic [ECW-1:0] num_edges,
  input  thr_t           k,
  input  size_t          min_size,
  output logic           busy,
  output logic           done,
  output logic [ECW-1:0] merges,
  // edge BRAM read port
  output logic           e_rd_en,
  output logic [EAW-1:0] e_rd_addr,
  input  edge_word_t     e_rd_word,
  // vertex memory port
  output logic           v_rd_en,
  output label_t         v_rd_addr,
  input  vertex_t        v_rd_data,
  output vertex_we_t     v_wr_we,
  output label_t         v_wr_addr,
  output vertex_t        v_wr_data
);
  typedef enum logic [2:0] {S_IDLE, S_RD, S_CAP, S_FIND, S_JOIN, S_NEXT} state_e;
  state_e state;

  logic [EAW-1:0]    addr_q;
  logic [LANE_W-1:0] lane_q;
  logic [ECW-1:0]    idx_q, num_q;
  edge_word_t        word_q;
  edge_t             cur;
  seg_mode_e         mode_q;
  logic              launched_q;
  logic              fb_go_q;      // FIND Vb starts in the next cycle
  logic              fa_ok_q, fb_ok_q;

  // FIND Va / FIND Vb / JOIN
  logic       fa_busy, fa_done, fb_busy, fb_done, j_busy, j_done, j_merged;
  label_t     root_a, root_b;
  logic       fa_rd_en, fb_rd_en, j_rd_en;
  label_t     fa_rd_addr, fb_rd_addr, j_rd_addr, fa_wr_addr, fb_wr_addr, j_wr_addr;
  vertex_we_t fa_wr_we, fb_wr_we, j_wr_we;
  vertex_t    fa_wr_data, fb_wr_data, j_wr_data;
  logic       go;

  assign cur = word_q[lane_q];
  assign go  = !launched_q;   // first cycle in a FIND/JOIN state

  find_unit u_find_a (
    .clk, .rst_n, .start((state == S_FIND) && go), .label_in(cur.va),
    .busy(fa_busy), .done(fa_done), .root(root_a),
    .rd_en(fa_rd_en), .rd_addr(fa_rd_addr), .rd_data(v_rd_data),
    .wr_we(fa_wr_we), .wr_addr(fa_wr_addr), .wr_data(fa_wr_data));

  find_unit u_find_b (
    .clk, .rst_n, .start(fb_go_q), .label_in(cur.vb),
    .busy(fb_busy), .done(fb_done), .root(root_b),
    .rd_en(fb_rd_en), .rd_addr(fb_rd_addr), .rd_data(v_rd_data),
    .wr_we(fb_wr_we), .wr_addr(fb_wr_addr), .wr_data(fb_wr_data));

  join_unit u_join (
    .clk, .rst_n, .start((state == S_JOIN) && go), .mode(mode_q),
    .la(root_a), .lb(root_b), .w(cur.w), .k, .min_size,
    .busy(j_busy), .done(j_done), .merged(j_merged),
    .rd_en(j_rd_en), .rd_addr(j_rd_addr), .rd_data(v_rd_data),
    .wr_we(j_wr_we), .wr_addr(j_wr_addr), .wr_data(j_wr_data));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr_q     <= '0;
      lane_q     <= '0;
      idx_q      <= '0;
      num_q      <= '0;
      word_q     <= '0;
      mode_q     <= MODE_THRESHOLD;
      merges     <= '0;
      done       <= 1'b0;
      launched_q <= 1'b0;
      fb_go_q    <= 1'b0;
      fa_ok_q    <= 1'b0;
      fb_ok_q    <= 1'b0;
    end else begin
      done    <= 1'b0;
      fb_go_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          addr_q     <= '0;
          lane_q     <= '0;
          idx_q      <= '0;
          num_q      <= num_edges;
          mode_q     <= mode;
          merges     <= '0;
          launched_q <= 1'b0;
          if (num_edges == '0) done  <= 1'b1;
          else                 state <= S_RD;
        end
        S_RD:  state <= S_CAP;
        S_CAP: begin
          word_q <= e_rd_word;
          state  <= S_FIND;
        end
        S_FIND: begin
          launched_q <= 1'b1;
          if (go) begin
            fb_go_q <= 1'b1;
            fa_ok_q <= 1'b0;
            fb_ok_q <= 1'b0;
          end else begin
            if (fa_done) fa_ok_q <= 1'b1;
            if (fb_done) fb_ok_q <= 1'b1;
            if ((fa_ok_q || fa_done) && (fb_ok_q || fb_done)) begin
              launched_q <= 1'b0;
              state      <= S_JOIN;
            end
          end
        end
        S_JOIN: begin
          launched_q <= 1'b1;
          if (j_done) begin
            launched_q <= 1'b0;
            if (j_merged) merges <= merges + 1'b1;
            state <= S_NEXT;
          end
        end
        S_NEXT: begin
          // update counter and address; compare with the edge count
          if (idx_q == num_q - 1'b1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            idx_q  <= idx_q + 1'b1;
            lane_q <= lane_q + 1'b1;
            if (lane_q == LANE_W'(LANES - 1)) begin
              addr_q <= addr_q + 1'b1;
              state  <= S_RD;
            end else begin
              state <= S_FIND;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    e_rd_en   = (state == S_RD);
    e_rd_addr = addr_q;
    // vertex port: JOIN owns it in S_JOIN; otherwise FIND Va and FIND Vb
    // share it in alternate cycles
    if (state == S_JOIN) begin
      v_rd_en = j_rd_en;  v_rd_addr = j_rd_addr;
      v_wr_we = j_wr_we;  v_wr_addr = j_wr_addr;  v_wr_data = j_wr_data;
    end else begin
      v_rd_en   = fa_rd_en | fb_rd_en;
      v_rd_addr = fa_rd_en ? fa_rd_addr : fb_rd_addr;
      v_wr_we   = fa_wr_we | fb_wr_we;
      v_wr_addr = (fa_wr_we != '0) ? fa_wr_addr : fb_wr_addr;
      v_wr_data = (fa_wr_we != '0) ? fa_wr_data : fb_wr_data;
    end
  end

  // JOIN never overlaps a FIND; the two FINDs never use a port in the same
  // cycle.
  a_join_alone: assert property (@(posedge clk) disable iff (!rst_n)
    j_busy |-> !(fa_busy || fb_busy));
  a_no_rd_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !(fa_rd_en && fb_rd_en));
  a_no_wr_clash: assert property (@(posedge clk) disable iff (!rst_n)
    !((fa_wr_we != '0) && (fb_wr_we != '0)));
endmodule
