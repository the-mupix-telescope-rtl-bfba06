// Testbench of sync_fifo: random pushes and pops against a queue model,
// including writes when full and reads when empty, which must be ignored.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_sync_fifo;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [15:0] wdata = 0, rdata;
  logic [3:0] level;
  logic [15:0] m [$];
  always #4 clk = ~clk;
  sync_fifo #(.WIDTH(16), .DEPTH(8)) dut (.clk, .rst_n, .clr(1'b0), .wr_en, .wdata, .rd_en, .rdata, .full, .empty, .level);
  `WATCHDOG(clk, 10000)
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      `CHECK(empty == (m.size() == 0) && full == (m.size() == 8) && level == 4'(m.size()), "flags and level")
      if (!empty) `CHECK(rdata == m[0], "head data")
      wr_en = (i < 1000) ? ($urandom_range(3) != 0) : ($urandom_range(3) == 0);
      rd_en = (i < 1000) ? ($urandom_range(3) == 0) : ($urandom_range(3) != 0);
      wdata = 16'($urandom);
      @(posedge clk);
      if (rd_en && m.size() > 0) void'(m.pop_front());
      if (wr_en && m.size() < 8 + (rd_en ? 0 : 0) && !full) m.push_back(wdata);
    end
    `TB_FINISH
  end
endmodule
