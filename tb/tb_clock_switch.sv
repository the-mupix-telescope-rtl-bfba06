// Testbench of clock_switch: the output follows the internal clock, then the
// external one after a switch, and never has a high or low phase shorter than
// the shorter half period of the two clocks.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_clock_switch;
  `TB_COUNTERS
  logic clk_int = 0, clk_ext = 0, rst_n = 0, sel = 0, clk_out;
  realtime last_edge = 0, min_pulse = 1000;
  int n_int = 0, n_ext = 0;
  always #4 clk_int = ~clk_int;      // 125 MHz
  always #3.3 clk_ext = ~clk_ext;    // unrelated phase and frequency
  clock_switch dut (.clk_int, .clk_ext, .rst_n, .sel, .clk_out);
  `WATCHDOG(clk_int, 5000)
  always @(clk_out) begin
    if ($realtime - last_edge < min_pulse && last_edge > 0) min_pulse = $realtime - last_edge;
    last_edge = $realtime;
  end
  initial begin
    repeat (3) @(posedge clk_int);
    rst_n = 1;
    for (int s = 0; s < 10; s++) begin
      repeat (20) @(posedge clk_int);
      // count output edges coinciding with each clock
      n_int = 0; n_ext = 0;
      for (int i = 0; i < 40; i++) begin
        @(posedge clk_out);
        if (clk_int && !clk_ext) n_int++;
        if (clk_ext && !clk_int) n_ext++;
        if (clk_int && clk_ext) begin n_int++; n_ext++; end
      end
      if (sel) `CHECK(n_ext == 40, "follows external clock")
      else     `CHECK(n_int == 40, "follows internal clock")
      #($urandom_range(7));
      sel = !sel;
    end
    `CHECK(min_pulse >= 3.29, "no glitch")
    `TB_FINISH
  end
endmodule
