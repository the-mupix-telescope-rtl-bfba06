// Testbench of link_unpacker: well-formed frames give labelled hits; frames
// cut by a control character or a code error are dropped and flagged; nothing
// is produced while the link is not locked.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_link_unpacker;
  import mupix_pkg::*;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, locked = 0, k = 1, code_err = 0;
  logic [7:0] data = K28_5;
  hit_t hit; logic hit_valid, frame_err;
  int n_hits = 0, n_err = 0;
  hit_t last_hit;
  always #4 clk = ~clk;
  link_unpacker #(.LABEL(3'd5)) dut (.clk, .rst_n, .locked, .data, .k, .code_err, .hit, .hit_valid, .frame_err);
  `WATCHDOG(clk, 5000)
  always @(posedge clk) begin
    if (hit_valid) begin n_hits++; last_hit = hit; end
    if (frame_err) n_err++;
  end
  task automatic sb(input logic [7:0] b, input logic kk, input logic e = 0);
    @(negedge clk); data = b; k = kk; code_err = e;
  endtask
  task automatic frame(input int c, input int r, input int t);
    sb(K28_0, 1); sb(8'(c), 0); sb(8'(r), 0); sb(8'(t), 0); sb(K28_5, 1);
  endtask
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    frame(3, 4, 5);
    repeat (3) @(posedge clk);
    `CHECK(n_hits == 0, "ignored while unlocked")
    locked = 1;
    for (int i = 0; i < 30; i++) begin
      int c, r, t;
      c = $urandom_range(31); r = $urandom_range(39); t = $urandom_range(255);
      frame(c, r, t);
      @(posedge clk); #1;
      `CHECK(n_hits == i + 1, "hit produced")
      `CHECK(last_hit.label == 3'd5 && last_hit.col == 5'(c) && last_hit.row == 6'(r) && last_hit.ts == 8'(t), "hit fields and label")
    end
    sb(K28_0, 1); sb(8'd1, 0); sb(K28_5, 1); sb(K28_5, 1);
    @(posedge clk); #1;
    `CHECK(n_hits == 30 && n_err == 1, "frame cut by comma dropped")
    sb(K28_0, 1); sb(8'd1, 0); sb(8'd2, 0, 1); sb(K28_5, 1);
    @(posedge clk); #1;
    `CHECK(n_hits == 30 && n_err == 2, "frame with code error dropped")
    sb(K28_0, 1); sb(8'd1, 0); sb(K28_0, 1); sb(8'd7, 0); sb(8'd8, 0); sb(8'd9, 0); sb(K28_5, 1);
    @(posedge clk); #1;
    `CHECK(n_hits == 31 && n_err == 3 && last_hit.col == 7 && last_hit.row == 8 && last_hit.ts == 9, "new header restarts frame")
    `TB_FINISH
  end
endmodule
