// tb_vmem: testbench model of the vertex BRAMs as seen through a vertex
// port - full-width vertex-number address, whole record read one cycle after
// rd_en, per-field writes. The testbench reads and sets the contents through
// the mem array directly; n_outside counts accesses beyond DEPTH.
module tb_vmem
  import egs_pkg::*;
#(
  parameter int DEPTH = 64
) (
  input  logic       clk,
  input  logic       rd_en,
  input  label_t     rd_addr,
  output vertex_t    rd_data,
  input  vertex_we_t wr_we,
  input  label_t     wr_addr,
  input  vertex_t    wr_data
);
  vertex_t mem [DEPTH];
  int      n_reads = 0, n_writes = 0, n_outside = 0;
  always @(posedge clk) begin
    if (rd_en && 32'(rd_addr) < DEPTH) begin
      rd_data <= mem[rd_addr];
      n_reads++;
    end
    if (wr_we != '0 && 32'(wr_addr) < DEPTH) begin
      n_writes++;
      if (wr_we.label) mem[wr_addr].label <= wr_data.label;
      if (wr_we.size)  mem[wr_addr].size  <= wr_data.size;
      if (wr_we.rank)  mem[wr_addr].rank  <= wr_data.rank;
      if (wr_we.thr)   mem[wr_addr].thr   <= wr_data.thr;
    end
  end
  always @(posedge clk) begin
    // counted, for the testbench to check; the access itself is dropped
    if (rd_en && 32'(rd_addr) >= DEPTH) n_outside++;
    if (wr_we != '0 && 32'(wr_addr) >= DEPTH) n_outside++;
  end
endmodule
