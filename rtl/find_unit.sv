// find_unit: FIND - follows parent labels in the label BRAM until it reaches
// the root label of a component.
//
// As in the FIND diagram, the start label is held in a register, one is
// subtracted from the current label to form the BRAM address, and the label
// read back is compared with the current one: equal means the current label
// is its own parent, i.e. the root. Otherwise the label read back is
// registered and the loop repeats. When the root is found it is written back
// to the label BRAM at the start label's address, so the next FIND of that
// vertex takes one step (the "updated label is stored in the Label BRAM").
// The write is skipped when the start label is already the root.
//
// Timing: each step is two cycles (address, then compare on the BRAM's read
// data); done pulses one cycle after the last compare with root valid, so a
// vertex d steps below its root sees done 2*(d+1)+2 cycles after start.
// Only the label field of the vertex port is used.
module find_unit
  import egs_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  label_t     label_in,
  output logic       busy,
  output logic       done,
  output label_t     root,
  // vertex memory port (address = vertex number = label - 1)
  output logic       rd_en,
  output label_t     rd_addr,
  input  vertex_t    rd_data,
  output vertex_we_t wr_we,
  output label_t     wr_addr,
  output vertex_t    wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_CMP, S_WB} state_e;
  state_e state;
  label_t start_q, cur_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      start_q <= '0;
      cur_q   <= '0;
      root    <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          start_q <= label_in;
          cur_q   <= label_in;
          state   <= S_READ;
        end
        S_READ: state <= S_CMP;
        S_CMP: begin
          if (rd_data.label == cur_q) begin
            root  <= cur_q;
            state <= S_WB;
          end else begin
            cur_q <= rd_data.label;
            state <= S_READ;
          end
        end
        S_WB: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy          = (state != S_IDLE);
    rd_en         = (state == S_READ);
    rd_addr       = cur_q - label_t'(1);
    wr_we         = '0;
    wr_we.label   = (state == S_WB) && (start_q != root);
    wr_addr       = start_q - label_t'(1);
    wr_data       = '0;
    wr_data.label = root;
  end

  // A label is never 0: labels count from 1.
  a_label_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> (label_in != '0));
endmodule
