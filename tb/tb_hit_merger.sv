// Testbench of hit_merger: four links send hits at random, at most one per
// four clocks each as the sensor link allows; every hit must come out once,
// per-link order kept, at most one per clock, and none dropped.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_hit_merger;
  import mupix_pkg::*;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  hit_t [3:0] in_hit; logic [3:0] in_valid = 0;
  hit_t out_hit; logic out_valid, drop;
  hit_t expq [4][$];
  int n_out = 0, n_drop = 0, n_sim = 0;
  always #4 clk = ~clk;
  hit_merger #(.N_LINKS(4)) dut (.clk, .rst_n, .clr(1'b0), .in_hit, .in_valid, .out_hit, .out_valid, .drop);
  `WATCHDOG(clk, 20000)
  always @(posedge clk) if (rst_n) begin
    if (drop) n_drop++;
    if (out_valid) begin
      int l;
      l = int'(out_hit.label);
      n_out++;
      `CHECK(expq[l].size() > 0 && out_hit == expq[l][0], "per-link order")
      if (expq[l].size() > 0) void'(expq[l].pop_front());
    end
  end
  initial begin
    int gap [4] = '{0, 0, 0, 0};
    int n_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      in_valid = 0;
      for (int l = 0; l < 4; l++) begin
        if (gap[l] > 0) gap[l]--;
        else if (c < 200 || $urandom_range(2) != 0) begin
          in_hit[l] = '{label: 3'(l), col: 5'($urandom), row: 6'($urandom), ts: 8'($urandom)};
          in_valid[l] = 1; gap[l] = 3; n_in++;
          expq[l].push_back(in_hit[l]);
        end
      end
      if (in_valid == 4'hF) n_sim++;
    end
    @(negedge clk) in_valid = 0;
    repeat (30) @(posedge clk);
    `CHECK(n_sim > 10, "simultaneous arrivals on all links happened")
    `CHECK(n_out == n_in && n_drop == 0, "all hits out, none dropped at full link rate")
    `TB_FINISH
  end
endmodule
