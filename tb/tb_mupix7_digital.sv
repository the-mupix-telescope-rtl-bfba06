// Testbench of mupix7_digital at full matrix size: after the synchronous
// reset, hits are injected on chosen pixels at chosen clocks. The serial
// output is received with a deserializer and decoder, frames are parsed, and
// every hit must come back once with its column, row and the 62.5 MHz time
// stamp of its clock (clocks since reset, minus one, halved).
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_mupix7_digital;
  import mupix_pkg::*;
  `TB_COUNTERS
  localparam int C = 32, R = 40, N = C * R;
  logic bitclk = 0, clk = 0, rst_n = 0, sync_rst = 0, sout;
  logic [N-1:0] hit_in = '0;
  logic [9:0] word; logic locked;
  logic [7:0] d; logic k, err;
  int ph = 0;
  always #0.4 bitclk = ~bitclk;
  always @(posedge bitclk) begin
    ph = (ph + 1) % 5;
    if (ph == 0) clk = ~clk;
  end
  mupix7_digital #(.N_COLS(C), .N_ROWS(R)) dut (.clk, .bitclk, .rst_n, .sync_rst, .hit_in, .sout);
  deserializer rx (.word_clk(clk), .bitclk, .rst_n, .sin(sout), .word, .locked);
  dec_8b10b dec (.code(word), .data(d), .k, .err);
  `WATCHDOG(clk, 20000)

  int exp_q [$];   // {col,row,ts} packed as int
  int got_q [$];
  int st = 0; logic [7:0] c_q, r_q;
  int n_err = 0;
  always @(posedge clk) if (locked) begin
    if (err) n_err++;
    case (st)
      0: if (k && d == K28_0) st = 1;
      1: begin c_q = d; st = 2; end
      2: begin r_q = d; st = 3; end
      3: begin got_q.push_back({8'd0, c_q, r_q, d}); st = 0; end
    endcase
  end

  initial begin
    int n;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (40) @(posedge clk);
    `CHECK(locked, "link locked on idle commas")
    @(negedge clk) sync_rst = 1;
    @(negedge clk) sync_rst = 0;     // reset edge was n = 0
    n = 1;
    for (int h = 0; h < 60; h++) begin
      int wait_n, pix;
      wait_n = $urandom_range(12);
      repeat (wait_n) begin @(negedge clk); n++; end
      pix = $urandom_range(N - 1);
      if (h == 0) pix = 0;
      if (h == 1) pix = N - 1;
      hit_in[pix] = 1;
      // sampled at edge n
      exp_q.push_back({8'd0, 8'(pix / R), 8'(pix % R), 8'((n - 1) / 2)});
      @(negedge clk); n++;
      hit_in = '0;
    end
    repeat (400) @(posedge clk);
    `CHECK(n_err == 0, "no code errors on the link")
    `CHECK(got_q.size() == exp_q.size(), "hit count")
    foreach (exp_q[i]) begin
      int idx [$];
      idx = got_q.find_first_index(x) with (x == exp_q[i]);
      `CHECK(idx.size() == 1, $sformatf("hit %0d col %0d row %0d ts %0d received", i,
             exp_q[i][23:16], exp_q[i][15:8], exp_q[i][7:0]))
      if (idx.size() == 1) got_q.delete(idx[0]);
    end
    `TB_FINISH
  end
endmodule
