// Testbench of deserializer: a bit stream that starts at an arbitrary bit
// offset and carries K28.5 commas followed by data symbols. The deserializer
// must lock and then deliver the data symbols in order on word clocks.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_deserializer;
  import mupix_pkg::*;
  `TB_COUNTERS
  logic bitclk = 0, clk = 0, rst_n = 0, sin = 0;
  logic [9:0] word;
  logic locked;
  logic [9:0] q [$];
  logic [9:0] data_sent [$];
  logic [9:0] got [$];
  int ph = 0;
  logic [9:0] sym [4] = '{10'b1010101010, 10'b0101010101, 10'b1001110100, 10'b0110001011};
  always #0.4 bitclk = ~bitclk;
  always @(posedge bitclk) begin
    ph = (ph + 1) % 5;
    if (ph == 0) clk = ~clk;
  end
  deserializer dut (.word_clk(clk), .bitclk, .rst_n, .sin, .word, .locked);
  `WATCHDOG(clk, 5000)
  // bit driver
  int bitn = 0;
  logic [9:0] cur;
  initial begin
    int skip;
    skip = 3 + $urandom_range(6);
    for (int i = 0; i < 12; i++) q.push_back(i % 2 ? COMMA_POS : COMMA_NEG);
    for (int i = 0; i < 100; i++) begin
      logic [9:0] s;
      s = sym[$urandom_range(3)];
      q.push_back(s); data_sent.push_back(s);
    end
    for (int i = 0; i < 20; i++) q.push_back(i % 2 ? COMMA_POS : COMMA_NEG);
    repeat (skip) @(negedge bitclk);
    cur = q.pop_front();
    forever begin
      @(negedge bitclk);
      sin = cur[9 - bitn];
      bitn++;
      if (bitn == 10) begin
        bitn = 0;
        cur = (q.size() > 0) ? q.pop_front() : COMMA_NEG;
      end
    end
  end
  always @(posedge clk) if (locked) got.push_back(word);
  initial begin
    int s; bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (150) @(posedge clk);
    `CHECK(locked, "locked on comma")
    s = -1;
    for (int i = 0; i + 100 <= got.size() && s < 0; i++) begin
      ok = (i > 0) && (got[i-1] == COMMA_POS || got[i-1] == COMMA_NEG);
      for (int j = 0; j < 100 && ok; j++) if (got[i + j] != data_sent[j]) ok = 0;
      if (ok) s = i;
    end
    `CHECK(s >= 0, "data symbols received in order after comma")
    `TB_FINISH
  end
endmodule
