// Testbench of dma_engine: words go to BASE + 4*(index mod ring size) in
// order; the engine stops when the ring holds MASK+1 unread words and goes on
// when the host advances its read pointer; requests hold while not accepted.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_dma_engine;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, enable = 1, in_valid = 0, in_ready, wr_valid, wr_ready = 1;
  logic [31:0] base = 32'h1000_0000, mask = 32'd15, rdptr = 0, wrptr, in_data = 0, wr_addr, wr_data;
  int n_wr = 0, n_stall_full = 0, sent = 0;
  always #4 clk = ~clk;
  dma_engine dut (.clk, .rst_n, .enable, .base, .mask, .rdptr, .wrptr, .in_data, .in_valid, .in_ready,
    .wr_valid, .wr_addr, .wr_data, .wr_ready);
  `WATCHDOG(clk, 20000)
  // sample before the edge, account after it
  always begin
    logic take, acc, sfull; logic [31:0] a, d;
    @(negedge clk); #3;
    take = wr_valid && wr_ready; a = wr_addr; d = wr_data;
    acc = in_valid && in_ready;
    sfull = in_valid && !in_ready && (wrptr - rdptr > mask);
    @(posedge clk); #1;
    if (sfull) n_stall_full++;
    if (acc) sent++;
    if (take) begin
      `CHECK(a == base + 32'((n_wr % 16) * 4), "ring address")
      `CHECK(d == 32'(n_wr * 3 + 7), "data in order")
      n_wr++;
    end
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000 && n_wr < 300; c++) begin
      @(negedge clk);
      wr_ready = $urandom_range(3) != 0;
      // the host frees space only now and then
      if ($urandom_range(30) == 0) rdptr = wrptr - 32'($urandom_range(3));
      in_valid = 1;
      in_data = 32'(sent * 3 + 7);
    end
    `CHECK(n_wr == 300, "300 words written")
    `CHECK(n_stall_full > 0, "ring-full stall happened")
    `CHECK(wrptr - rdptr <= mask + 1, "never more than the ring holds")
    `TB_FINISH
  end
endmodule
