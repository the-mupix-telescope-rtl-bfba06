// Testbench of hit_buffer: a hit stores the current time stamp, a full cell
// ignores later hits, clear empties a cell and wins over a new hit.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_hit_buffer;
  `TB_COUNTERS
  localparam int C = 4, R = 5, N = C * R;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] hit_in = '0, clear = '0, full;
  logic [7:0] ts = 0;
  logic [N-1:0][7:0] cell_ts;
  always #4 clk = ~clk;
  hit_buffer #(.N_COLS(C), .N_ROWS(R)) dut (.clk, .rst_n, .hit_in, .ts, .clear, .full, .cell_ts);
  `WATCHDOG(clk, 2000)
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    `CHECK(full == 0, "empty after reset")
    ts = 8'd17; hit_in[3] = 1; hit_in[11] = 1;
    @(negedge clk);
    hit_in = '0;
    `CHECK(full[3] && full[11] && $countones(full) == 2, "two cells full")
    `CHECK(cell_ts[3] == 17 && cell_ts[11] == 17, "time stamp stored")
    ts = 8'd40; hit_in[3] = 1;
    @(negedge clk);
    hit_in = '0;
    `CHECK(cell_ts[3] == 17, "full cell keeps first hit")
    clear[3] = 1; hit_in[3] = 1; ts = 8'd41;
    @(negedge clk);
    clear = '0; hit_in = '0;
    `CHECK(!full[3], "clear wins")
    ts = 8'd99; hit_in[3] = 1;
    @(negedge clk);
    hit_in = '0;
    `CHECK(full[3] && cell_ts[3] == 99, "re-armed after clear")
    for (int k = 0; k < 50; k++) begin
      int i; logic was; logic [7:0] old;
      i = $urandom_range(N - 1); was = full[i]; old = cell_ts[i];
      ts = 8'($urandom); hit_in[i] = 1;
      @(negedge clk);
      hit_in = '0;
      `CHECK(full[i] && cell_ts[i] == (was ? old : ts), "random hit")
      if ($urandom_range(1)) begin
        clear[i] = 1; @(negedge clk); clear = '0;
        `CHECK(!full[i], "random clear")
      end
    end
    `TB_FINISH
  end
endmodule
