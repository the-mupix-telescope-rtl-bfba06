// Testbench of ts_counter: the count advances every second clock (62.5 MHz
// from 125 MHz), tick marks the advance, and the synchronous reset clears it.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_ts_counter;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, sync_rst = 0, tick;
  logic [31:0] ts;
  always #4 clk = ~clk;
  ts_counter dut (.clk, .rst_n, .sync_rst, .tick, .ts);
  `WATCHDOG(clk, 2000)
  initial begin
    int t0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    t0 = ts;
    repeat (200) @(posedge clk);
    #1 `CHECK(ts == 32'(t0 + 100), "ts advances by 1 per 2 clocks")
    for (int i = 0; i < 20; i++) begin
      logic [31:0] prev;
      prev = ts;
      @(posedge clk); #1;
      `CHECK(ts - prev <= 1, "step at most one")
    end
    // tick precedes each change
    for (int i = 0; i < 20; i++) begin
      logic [31:0] prev; logic tk;
      prev = ts; tk = tick;
      @(posedge clk); #1;
      `CHECK((ts != prev) == tk, "tick marks change")
    end
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;
    `CHECK(ts == 0, "sync reset clears")
    repeat (20) @(posedge clk);
    #1 `CHECK(ts == 10, "restart after reset")
    `TB_FINISH
  end
endmodule
