// Testbench of tile_block_builder: stamps from a queue; output must be a
// header per non-empty 256-count window, the stamps of that window, and a
// trailer with their number; an open block closes when time moves on.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_tile_block_builder;
  import mupix_pkg::*;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, out_valid, out_last, out_ready = 1, fifo_rd;
  logic [31:0] now = 0, out_data;
  logic [32:0] q [$];
  logic [32:0] head;
  logic [31:0] got [$];
  always #4 clk = ~clk;
  assign head = (q.size() > 0) ? q[0] : '0;
  tile_block_builder dut (.clk, .rst_n, .sync_rst(1'b0), .now, .fifo_empty(q.size() == 0), .fifo_data(head),
    .fifo_rd, .out_data, .out_valid, .out_last, .out_ready);
  `WATCHDOG(clk, 20000)
  // sample just before the rising edge, when all inputs have settled
  always begin
    logic acc, rd; logic [31:0] d;
    @(negedge clk); #3;
    acc = out_valid && out_ready; rd = fifo_rd; d = out_data;
    @(posedge clk); #1;
    if (acc) got.push_back(d);
    if (rd) void'(q.pop_front());
  end
  initial begin
    logic [32:0] stamps [$];
    int p, t;
    repeat (2) @(posedge clk);
    rst_n = 1;
    t = 300;
    for (int i = 0; i < 60; i++) begin
      t += $urandom_range(200);
      stamps.push_back({1'($urandom), 32'(t)});
    end
    foreach (stamps[i]) q.push_back(stamps[i]);
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      out_ready = $urandom_range(3) != 0;
      if (c % 4 == 0) now = now + 1;
    end
    // reference
    p = 0;
    for (int i = 0; i < stamps.size();) begin
      int b, n;
      b = int'(stamps[i][31:8]); n = 0;
      `CHECK(p < got.size() && got[p] == {W_TILE_HDR, 4'd0, 24'(b)}, "tile header")
      p++;
      while (i < stamps.size() && int'(stamps[i][31:8]) == b) begin
        `CHECK(p < got.size() && got[p] == {W_TILE_HIT, 3'd0, stamps[i][32], stamps[i][23:0]}, "tile hit")
        p++; i++; n++;
      end
      `CHECK(p < got.size() && got[p] == {W_TILE_TRL, 12'd0, 16'(n)}, "tile trailer")
      p++;
    end
    `CHECK(p == got.size(), "nothing extra")
    `TB_FINISH
  end
endmodule
