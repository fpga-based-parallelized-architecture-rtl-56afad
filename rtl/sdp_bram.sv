// sdp_bram: simple dual-port block RAM, one write port and one read port on
// a common array, both synchronous to one clock.
//
// Every memory of the design is one of these, as the FPGA implementation
// uses simple dual-port BRAMs for all seven of its memories (Va, Vb, W,
// label, size, rank, threshold). The write port has NSEG write enables, each
// covering WIDTH/NSEG bits, so that one of the four edges packed into an
// edge-BRAM address can be written alone. The read port has one cycle of
// latency: the word at rd_addr appears on rd_data in the cycle after rd_en.
// A read and a write of the same address in the same cycle return the old
// word (read-first). The contents are not reset; they are written by the
// initialisation logic before they are read. Segment write enables and the
// read-first behaviour are this design's choices.
module sdp_bram #(
  parameter int unsigned WIDTH = 24,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned NSEG  = 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [NSEG-1:0]  wr_seg,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);
  localparam int unsigned SEG_W = WIDTH / NSEG;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int s = 0; s < NSEG; s++) begin
        if (wr_seg[s]) mem[wr_addr][s*SEG_W +: SEG_W] <= wr_data[s*SEG_W +: SEG_W];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

  initial begin
    assert (WIDTH % NSEG == 0) else $error("sdp_bram: WIDTH must be a multiple of NSEG");
  end
endmodule
