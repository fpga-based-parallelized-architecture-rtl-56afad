// tb_sdp_bram: random writes and reads of a small sdp_bram with 4 write
// segments; checks one-cycle read latency, segment enables, read-first
// behaviour on a same-address read and write, and that rd_data holds
// while rd_en is low.
module tb_sdp_bram;
  localparam int WATCHDOG = 20000;
  `include "tb_common.svh"
  localparam int W = 32, D = 20, NS = 4;
  logic wr_en, rd_en;
  logic [NS-1:0] wr_seg;
  logic [4:0] wr_addr, rd_addr;
  logic [W-1:0] wr_data, rd_data;
  logic [W-1:0] model [D];

  sdp_bram #(.WIDTH(W), .DEPTH(D), .NSEG(NS)) dut (.*);

  initial begin
    wr_en = 0; rd_en = 0; wr_seg = '1; wr_addr = '0; rd_addr = '0; wr_data = '0;
    do_reset();
    for (int a = 0; a < D; a++) begin
      wr_en <= 1; wr_seg <= '1; wr_addr <= 5'(a); wr_data <= $urandom; @(posedge clk);
      model[a] = wr_data;
    end
    wr_en <= 0;
    for (int i = 0; i < 300; i++) begin
      automatic int a = $urandom_range(0, D-1), b = $urandom_range(0, D-1);
      automatic logic [W-1:0] d = $urandom;
      automatic logic [NS-1:0] s = NS'($urandom);
      automatic logic [W-1:0] expect_rd = model[b];
      wr_en <= 1; wr_seg <= s; wr_addr <= 5'(a); wr_data <= d;
      rd_en <= 1; rd_addr <= 5'(b);
      @(posedge clk);
      for (int k = 0; k < NS; k++) if (s[k]) model[a][k*8 +: 8] = d[k*8 +: 8];
      wr_en <= 0; rd_en <= 0;
      #1 check(rd_data == expect_rd, $sformatf("read %0d (read-first)", b));
      @(posedge clk);
      #1 check(rd_data == expect_rd, "rd_data held while rd_en low");
    end
    for (int a = 0; a < D; a++) begin
      rd_en <= 1; rd_addr <= 5'(a); @(posedge clk); rd_en <= 0;
      #1 check(rd_data == model[a], $sformatf("final read %0d", a));
    end
    finish_tb();
  end
endmodule
