// recolor_unit: post-processing and rendering - turns the final graph back
// into an image in which every segment has its own random-looking colour.
//
// The pixels are visited in raster order of the whole IMG_W x IMG_H image
// (the tile of a pixel and its place in the tile are tracked with counters,
// so no division is needed). For each pixel a FIND gives the root label of
// its segment, and the colour is the root label times an odd constant,
// modulo 2^24, split into R, G, B. Multiplying by an odd number is a
// bijection on 24-bit values, so two segments never get the same colour;
// this colouring rule stands in for the paper's unspecified "random colour
// assignment". The root label itself is output as well.
//
// Interface: start, then one out_valid per pixel with out_x, out_y,
// out_label and out_rgb; done after the last pixel. The vertex port is the
// shared one (address = vertex number = label - 1); FIND writes compressed
// parent labels through it. Time per pixel: one FIND plus one cycle.
module recolor_unit
  import egs_pkg::*;
#(
  parameter int unsigned NCOL  = 4,
  parameter int unsigned NROW  = 2,
  parameter int unsigned TW    = 32,
  parameter int unsigned TH    = 36,
  parameter logic [LABEL_W-1:0] HUE_MULT = 24'h9E3779,
  localparam int unsigned IMG_W = NCOL * TW,
  localparam int unsigned IMG_H = NROW * TH,
  localparam int unsigned LW    = (TW * TH > 1) ? $clog2(TW * TH) : 1,
  localparam int unsigned XW    = $clog2(IMG_W + 1),
  localparam int unsigned YW    = $clog2(IMG_H + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic          out_valid,
  output logic [XW-1:0] out_x,
  output logic [YW-1:0] out_y,
  output label_t        out_label,
  output rgb_t          out_rgb,
  // shared vertex port
  output logic          rd_en,
  output label_t        rd_addr,
  input  vertex_t       rd_data,
  output vertex_we_t    wr_we,
  output label_t        wr_addr,
  output vertex_t       wr_data
);
  typedef enum logic [1:0] {S_IDLE, S_FIND, S_WAIT, S_NEXT} state_e;
  state_e state;

  logic [XW-1:0] x_q, lx_q, tx_q;
  logic [YW-1:0] y_q, ly_q, ty_q;
  label_t        vlabel, root;
  logic          f_busy, f_done;

  assign vlabel = (label_t'(32'(ty_q) * NCOL + 32'(tx_q)) << LW)
                + label_t'(32'(ly_q) * TW + 32'(lx_q)) + label_t'(1);

  find_unit u_find (
    .clk, .rst_n, .start(state == S_FIND), .label_in(vlabel),
    .busy(f_busy), .done(f_done), .root,
    .rd_en, .rd_addr, .rd_data, .wr_we, .wr_addr, .wr_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      x_q       <= '0; y_q  <= '0;
      lx_q      <= '0; ly_q <= '0;
      tx_q      <= '0; ty_q <= '0;
      done      <= 1'b0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      out_label <= '0;
      out_rgb   <= '0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          x_q  <= '0; y_q  <= '0;
          lx_q <= '0; ly_q <= '0;
          tx_q <= '0; ty_q <= '0;
          state <= S_FIND;
        end
        S_FIND: state <= S_WAIT;
        S_WAIT: if (f_done) begin
          out_valid <= 1'b1;
          out_x     <= x_q;
          out_y     <= y_q;
          out_label <= root;
          out_rgb   <= rgb_t'(root * HUE_MULT);
          state     <= S_NEXT;
        end
        S_NEXT: begin
          state <= S_FIND;
          if (32'(x_q) != IMG_W - 1) begin
            x_q <= x_q + 1'b1;
            if (32'(lx_q) == TW - 1) begin
              lx_q <= '0;
              tx_q <= tx_q + 1'b1;
            end else begin
              lx_q <= lx_q + 1'b1;
            end
          end else begin
            x_q <= '0; lx_q <= '0; tx_q <= '0;
            if (32'(y_q) == IMG_H - 1) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              y_q <= y_q + 1'b1;
              if (32'(ly_q) == TH - 1) begin
                ly_q <= '0;
                ty_q <= ty_q + 1'b1;
              end else begin
                ly_q <= ly_q + 1'b1;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE) || f_busy;
endmodule
