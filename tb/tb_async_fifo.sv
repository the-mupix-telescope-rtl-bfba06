// Testbench of async_fifo: writer at 500 MHz, reader at 125 MHz with random
// enables; every word must arrive once and in order, none while empty.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_async_fifo;
  `TB_COUNTERS
  logic wclk = 0, rclk = 0, rst_n = 0, wr_en = 0, rd_en = 0, full, empty;
  logic [32:0] wdata = 0, rdata;
  logic [32:0] m [$];
  int n_rx = 0, n_full = 0;
  always #1 wclk = ~wclk;
  always #4 rclk = ~rclk;
  async_fifo #(.WIDTH(33), .DEPTH(8)) dut (.wclk, .wrst_n(rst_n), .wr_en, .wdata, .full,
    .rclk, .rrst_n(rst_n), .rd_en, .rdata, .empty);
  `WATCHDOG(rclk, 20000)
  always @(posedge wclk) if (rst_n) begin
    if (wr_en && !full) m.push_back(wdata);
    if (full) n_full++;
  end
  always @(negedge wclk) begin
    wr_en <= rst_n && ($urandom_range(5) == 0);
    wdata <= 33'({$urandom, $urandom});
  end
  always @(posedge rclk) if (rst_n && rd_en && !empty) begin
    n_rx++;
    `CHECK(m.size() > 0 && rdata == m[0], "in order")
    if (m.size() > 0) void'(m.pop_front());
  end
  always @(negedge rclk) rd_en <= ($urandom_range(2) != 0);
  initial begin
    repeat (3) @(posedge rclk);
    rst_n = 1;
    repeat (5000) @(posedge rclk);
    `CHECK(n_rx > 1000, "words passed")
    `CHECK(n_full > 0, "full seen")
    `TB_FINISH
  end
endmodule
