// Testbench of tile_tdc: the counter runs at the fast clock and restarts at
// the synchronous reset; each rising tile edge gives one record with the tile
// number and the count two clocks (synchronizer) after the edge; two tiles
// firing together both get recorded.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_tile_tdc;
  `TB_COUNTERS
  logic fastclk = 0, clk = 0, rst_n = 0, sync_rst = 0, fifo_full = 0, wr_en;
  logic [1:0] tile_in = 0;
  logic [32:0] wdata;
  logic [32:0] recs [$];
  int fc = 0;    // fast clocks since the counter cleared (model)
  always #1 fastclk = ~fastclk;
  always #4 clk = ~clk;
  tile_tdc #(.N_TILES(2), .CNT_BITS(32), .TW(1)) dut (.fastclk, .rst_n, .sync_rst, .tile_in, .fifo_full, .wr_en, .wdata);
  `WATCHDOG(clk, 5000)
  always @(posedge fastclk) if (wr_en) recs.push_back(wdata);
  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;
    repeat (10) @(posedge clk);
    for (int i = 0; i < 20; i++) begin
      int base, tl;
      @(negedge fastclk);
      base = int'(dut.count);
      tl = $urandom_range(2);   // 0, 1 or both (2)
      if (tl == 2) tile_in = 2'b11; else tile_in[tl] = 1;
      repeat (5) @(negedge fastclk);
      tile_in = 0;
      repeat (10) @(negedge fastclk);
      if (tl == 2) begin
        `CHECK(recs.size() == 2, "two records for two tiles")
        `CHECK(recs.size() == 2 && recs[0] == {1'b0, 32'(base + 2)} && recs[1] == {1'b1, 32'(base + 2)}, "both stamps")
      end else begin
        `CHECK(recs.size() == 1 && recs[0] == {1'(tl), 32'(base + 2)}, "one stamp, count at edge + 2")
      end
      recs.delete();
      repeat ($urandom_range(7)) @(negedge fastclk);
    end
    // counter rate and restart
    @(negedge fastclk) t0 = int'(dut.count);
    repeat (40) @(negedge fastclk);
    `CHECK(int'(dut.count) == t0 + 40, "counts every fast clock")
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;
    repeat (2) @(negedge clk);
    `CHECK(int'(dut.count) < 12, "restarted by sync reset")
    `TB_FINISH
  end
endmodule
