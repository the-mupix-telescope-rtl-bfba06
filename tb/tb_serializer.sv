// Testbench of serializer: ten bits per word clock leave MSB first, in order,
// with no gaps, at ten times the word rate. The bit stream is captured and
// the word sequence searched at 10-bit spacing.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_serializer;
  `TB_COUNTERS
  logic bitclk = 0, clk = 0, rst_n = 0, sout;
  logic [9:0] word = 0;
  logic [9:0] sent [$];
  logic       bits [$];
  int         ph = 0;
  always #0.4 bitclk = ~bitclk;
  always @(posedge bitclk) begin
    ph = (ph + 1) % 5;
    if (ph == 0) clk = ~clk;
  end
  serializer dut (.word_clk(clk), .bitclk, .rst_n, .word, .sout);
  `WATCHDOG(clk, 5000)
  always @(posedge bitclk) if (rst_n) bits.push_back(sout);
  initial begin
    int start; bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      word = 10'($urandom);
      sent.push_back(word);
    end
    repeat (5) @(posedge clk);
    `CHECK(bits.size() >= 200 * 10, "enough bits")
    start = -1;
    for (int o = 0; o + 2000 <= bits.size() && start < 0; o++) begin
      ok = 1;
      for (int w = 0; w < 200 && ok; w++)
        for (int b = 0; b < 10; b++)
          if (bits[o + w * 10 + b] != sent[w][9 - b]) ok = 0;
      if (ok) start = o;
    end
    `CHECK(start >= 0, "all 200 words found back to back, MSB first")
    `CHECK(start >= 0 && start <= 40, "latency below 4 word clocks")
    `TB_FINISH
  end
endmodule
