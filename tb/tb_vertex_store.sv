// tb_vertex_store: writes random vertex records with random per-field write
// enables and checks every read against a model of the four BRAMs.
module tb_vertex_store;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int D = 16;
  vertex_we_t wr_we;
  logic [3:0] wr_addr, rd_addr;
  vertex_t wr_data, rd_data;
  logic rd_en;
  vertex_t model [D];

  vertex_store #(.DEPTH(D)) dut (.*);

  initial begin
    wr_we = '0; wr_addr = '0; rd_addr = '0; wr_data = '0; rd_en = 0;
    do_reset();
    for (int a = 0; a < D; a++) begin
      automatic vertex_t v = {$urandom, $urandom, $urandom};
      wr_we <= '1; wr_addr <= 4'(a); wr_data <= v; @(posedge clk);
      model[a] = v;
    end
    for (int i = 0; i < 400; i++) begin
      automatic int a = $urandom_range(0, D-1), b = $urandom_range(0, D-1);
      automatic vertex_t v = {$urandom, $urandom, $urandom};
      automatic vertex_we_t e = vertex_we_t'($urandom);
      automatic vertex_t expect_rd = model[b];
      wr_we <= e; wr_addr <= 4'(a); wr_data <= v; rd_en <= 1; rd_addr <= 4'(b);
      @(posedge clk);
      if (e.label) model[a].label = v.label;
      if (e.size)  model[a].size  = v.size;
      if (e.rank)  model[a].rank  = v.rank;
      if (e.thr)   model[a].thr   = v.thr;
      wr_we <= '0; rd_en <= 0;
      #1 check(rd_data == expect_rd, $sformatf("vertex %0d", b));
    end
    finish_tb();
  end
endmodule
