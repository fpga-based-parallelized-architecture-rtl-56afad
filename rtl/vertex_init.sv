// vertex_init: "variable declaration and initialisation" of one vertex bank.
//
// After start it writes one vertex per cycle for addresses 0..COUNT-1: every
// vertex becomes a component of its own, with label = base + address + 1,
// size 1, rank 0 and threshold t equal to the global threshold k, as the
// sequential architecture describes. done pulses for one cycle after the last
// write, COUNT+1 cycles after start. base is the bank's first vertex number,
// so labels are unique across banks. Rank 0 as the initial rank and the
// one-write-per-cycle sweep are this design's choices.
module vertex_init
  import egs_pkg::*;
#(
  parameter int unsigned COUNT = 1152,
  localparam int unsigned AW   = (COUNT > 1) ? $clog2(COUNT) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  label_t        base,
  input  thr_t          k,
  output logic          busy,
  output logic          done,
  output vertex_we_t    wr_we,
  output logic [AW-1:0] wr_addr,
  output vertex_t       wr_data
);
  logic [AW-1:0] addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      done   <= 1'b0;
      addr_q <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        addr_q <= '0;
      end else if (busy) begin
        if (addr_q == AW'(COUNT - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          addr_q <= addr_q + 1'b1;
        end
      end
    end
  end

  always_comb begin
    wr_we         = busy ? '{label: 1'b1, size: 1'b1, rank: 1'b1, thr: 1'b1} : '0;
    wr_addr       = addr_q;
    wr_data.label = base + label_t'(addr_q) + label_t'(1);
    wr_data.size  = size_t'(1);
    wr_data.rank  = '0;
    wr_data.thr   = k;
  end
endmodule
