// Testbench of block_arbiter: two sources of blocks with random lengths and
// gaps; the output must carry each block whole (no interleaving), all blocks
// of each source in order, and the two sources take turns when both wait.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_block_arbiter;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic [31:0] a_data, b_data, out_data;
  logic a_valid, a_last, a_ready, b_valid, b_last, b_ready, out_valid, out_ready = 1;
  logic [31:0] aq [$], bq [$];   // bit 31 = last, bit 30 = source
  logic [31:0] got [$];
  int n_both = 0;
  always #4 clk = ~clk;
  block_arbiter dut (.clk, .rst_n, .a_data, .a_valid, .a_last, .a_ready, .b_data, .b_valid, .b_last, .b_ready,
    .out_data, .out_valid, .out_ready);
  `WATCHDOG(clk, 20000)
  assign a_valid = aq.size() > 0 && rst_n;
  assign a_data = a_valid ? aq[0] : '0;
  assign a_last = a_data[31];
  assign b_valid = bq.size() > 0 && rst_n;
  assign b_data = b_valid ? bq[0] : '0;
  assign b_last = b_data[31];
  // sample just before the rising edge, when all inputs have settled
  always begin
    logic acc, apop, bpop, both, aok, bok; logic [31:0] d;
    @(negedge clk); #3;
    acc = out_valid && out_ready; d = out_data;
    apop = a_valid && a_ready; bpop = b_valid && b_ready;
    both = a_valid && b_valid && dut.grant == dut.G_NONE;
    aok = dut.last_b ? ((a_ready == out_ready) && !b_ready) : ((b_ready == out_ready) && !a_ready);
    @(posedge clk); #1;
    if (acc) got.push_back(d);
    if (apop) void'(aq.pop_front());
    if (bpop) void'(bq.pop_front());
    if (both) begin
      n_both++;
      `CHECK(aok, "sources alternate")
    end
  end
  initial begin
    int na = 0, nb = 0, ea = 0, eb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 200; blk++) begin
      int len;
      len = 1 + $urandom_range(6);
      for (int w = 0; w < len; w++) begin
        if (blk % 2 == 0) aq.push_back({w == len - 1, 1'b0, 14'(blk), 16'(w)});
        else              bq.push_back({w == len - 1, 1'b1, 14'(blk), 16'(w)});
      end
    end
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      out_ready = $urandom_range(3) != 0;
    end
    begin
      logic [13:0] cur; logic in_blk;
      in_blk = 0;
      foreach (got[i]) begin
        if (in_blk) `CHECK(got[i][29:16] == cur, "block not interleaved")
        cur = got[i][29:16];
        in_blk = !got[i][31];
        if (got[i][31]) begin
          if (got[i][30]) begin `CHECK(int'(cur) == 2 * eb + 1, "tile blocks in order") eb++; end
          else begin `CHECK(int'(cur) == 2 * ea, "pixel blocks in order") ea++; end
        end
      end
    end
    `CHECK(ea == 100 && eb == 100, "all blocks out")
    `CHECK(n_both > 0, "contention happened")
    `TB_FINISH
  end
endmodule
