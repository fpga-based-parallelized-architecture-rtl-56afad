// tb_edge_store: writes edges lane by lane in random order and checks that
// each address returns its four edges, lane i being edge 4*addr+i.
module tb_edge_store;
  import egs_pkg::*;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int WORDS = 10;
  logic wr_en, rd_en;
  logic [1:0] wr_lane;
  logic [3:0] wr_addr, rd_addr;
  edge_t wr_edge;
  edge_word_t rd_word;
  edge_t model [WORDS*4];

  edge_store #(.WORDS(WORDS)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_lane = '0; wr_addr = '0; rd_addr = '0; wr_edge = '0;
    do_reset();
    for (int r = 0; r < 3; r++)
      for (int i = 0; i < WORDS*4; i++) begin
        automatic int p = $urandom_range(0, WORDS*4-1);
        automatic edge_t e = {$urandom, $urandom};
        wr_en <= 1; wr_lane <= 2'(p % 4); wr_addr <= 4'(p / 4); wr_edge <= e;
        @(posedge clk);
        model[p] = e;
      end
    wr_en <= 0;
    for (int i = 0; i < WORDS*4; i++) begin
      wr_en <= 1; wr_lane <= 2'(i % 4); wr_addr <= 4'(i / 4); wr_edge <= model[i] ^ 64'(i);
      @(posedge clk);
      model[i] = model[i] ^ 64'(i);
    end
    wr_en <= 0;
    for (int a = 0; a < WORDS; a++) begin
      rd_en <= 1; rd_addr <= 4'(a); @(posedge clk); rd_en <= 0;
      #1 for (int l = 0; l < 4; l++)
        check(rd_word[l] == model[4*a + l], $sformatf("edge %0d", 4*a + l));
    end
    finish_tb();
  end
endmodule
