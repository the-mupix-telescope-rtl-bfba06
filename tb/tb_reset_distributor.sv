// Testbench of reset_distributor: a master and a slave wired as on the
// adapter card (master reset_1 looped back, reset_2 to the slave) must both
// pulse sync_rst in the same clock, a fixed number of clocks after the request;
// a request to the slave does nothing.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_reset_distributor;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, req_m = 0, req_s = 0;
  logic m1, m2, s1, s2, sr_m, sr_s;
  int cyc = 0, t_m = -1, t_s = -1, n_m = 0, n_s = 0;
  always #4 clk = ~clk;
  reset_distributor #(.MASTER(1'b1)) u_m (.clk, .rst_n, .reset_req(req_m), .reset_in(m1), .reset_1(m1), .reset_2(m2), .sync_rst(sr_m));
  reset_distributor #(.MASTER(1'b0)) u_s (.clk, .rst_n, .reset_req(req_s), .reset_in(m2), .reset_1(s1), .reset_2(s2), .sync_rst(sr_s));
  `WATCHDOG(clk, 2000)
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (sr_m) begin n_m++; t_m = cyc; end
    if (sr_s) begin n_s++; t_s = cyc; end
    `CHECK(!s1 && !s2, "slave never drives")
  end
  initial begin
    int t0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    @(negedge clk) req_s = 1;
    @(negedge clk) req_s = 0;
    repeat (10) @(posedge clk);
    `CHECK(n_m == 0 && n_s == 0, "slave request ignored")
    for (int i = 0; i < 3; i++) begin
      @(negedge clk) req_m = 1; t0 = cyc + 1;
      @(negedge clk) req_m = 0;
      repeat (15) @(posedge clk);
      `CHECK(n_m == i + 1 && n_s == i + 1, "one pulse each")
      `CHECK(t_m == t_s, "master and slave in the same clock")
      `CHECK(t_m - t0 == 5, "fixed latency")
    end
    `TB_FINISH
  end
endmodule
