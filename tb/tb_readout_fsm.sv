// Testbench of readout_fsm: commas when idle; each full cell is read as
// K28.0, column, row, time stamp in four clocks, lowest address first, and
// cleared.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_readout_fsm;
  import mupix_pkg::*;
  `TB_COUNTERS
  localparam int C = 4, R = 5, N = C * R;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] full, clear;
  logic [N-1:0][7:0] cell_ts;
  logic [7:0] tx_data;
  logic tx_k;
  always #4 clk = ~clk;
  readout_fsm #(.N_COLS(C), .N_ROWS(R)) dut (.clk, .rst_n, .full, .cell_ts, .clear, .tx_data, .tx_k);
  `WATCHDOG(clk, 5000)
  always_ff @(posedge clk) full <= full & ~clear;
  initial begin
    int cyc;
    full = '0;
    for (int i = 0; i < N; i++) cell_ts[i] = 8'(i * 7 + 3);
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    #1 `CHECK(tx_k && tx_data == K28_5, "idle comma")
    @(negedge clk);
    full[13] = 1; full[6] = 1; full[19] = 1;
    for (int e = 0; e < 3; e++) begin
      int exp_i;
      exp_i = (e == 0) ? 6 : (e == 1) ? 13 : 19;
      @(posedge clk); #1;
      `CHECK(tx_k && tx_data == K28_0, "header")
      cyc = 1;
      @(posedge clk); #1;
      `CHECK(!tx_k && tx_data == 8'(exp_i / R), "column")
      @(posedge clk); #1;
      `CHECK(!tx_k && tx_data == 8'(exp_i % R), "row")
      @(posedge clk); #1;
      `CHECK(!tx_k && tx_data == cell_ts[exp_i], "time stamp")
      `CHECK(!full[exp_i], "cell cleared")
    end
    @(posedge clk); #1;
    `CHECK(tx_k && tx_data == K28_5, "back to idle")
    // all cells: N hits in 4N clocks, each once
    @(negedge clk);
    full = '1;
    begin
      int seen = 0, k28 = 0;
      for (int c = 0; c < 4 * N; c++) begin
        @(posedge clk); #1;
        if (tx_k && tx_data == K28_0) seen++;
        if (tx_k && tx_data == K28_5) k28++;
      end
      `CHECK(seen == N && k28 == 0, "full matrix at one hit per four clocks")
      `CHECK(full == 0, "all cleared")
    end
    `TB_FINISH
  end
endmodule
