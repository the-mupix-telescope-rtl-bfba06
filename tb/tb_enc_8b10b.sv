// Testbench of enc_8b10b: known symbols of the standard 8b/10b code (K28.5
// in both disparities, D21.5, D0.0), then random bytes checked for DC balance
// (running sum of +1/-1 per bit stays within +-3 at symbol ends), run length
// at most 5, and decoding back through dec_8b10b.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_enc_8b10b;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic [7:0] data = 8'hBC;
  logic k = 1;
  logic [9:0] code;
  logic [7:0] dd; logic dk, derr;
  always #4 clk = ~clk;
  enc_8b10b dut (.clk, .rst_n, .data, .k, .code);
  dec_8b10b ref_dec (.code, .data(dd), .k(dk), .err(derr));
  `WATCHDOG(clk, 10000)

  task automatic send(input logic [7:0] d, input logic kk);
    @(negedge clk); data = d; k = kk;
    @(posedge clk); #1;
  endtask

  initial begin
    int sum, run; logic lastbit;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;        // data is K28.5 already
    @(posedge clk); #1; `CHECK(code == 10'b0011111010, "K28.5 RD-")
    send(8'hBC, 1); `CHECK(code == 10'b1100000101, "K28.5 RD+")
    send(8'h00, 0); `CHECK(code == 10'b1001110100, "D0.0 RD-")
    send(8'h1C, 1); `CHECK(code == 10'b0011110100, "K28.0 RD-")
    send(8'hB5, 0); `CHECK(code == 10'b1010101010, "D21.5")
    send(8'hBC, 1); `CHECK(code == 10'b0011111010, "K28.5 RD- again")
    send(8'h1C, 1); `CHECK(code == 10'b1100001011, "K28.0 RD+")
    send(8'h00, 0); `CHECK(code == 10'b0110001011, "D0.0 RD+")
    sum = 0; run = 0; lastbit = 0;
    for (int i = 0; i < 2000; i++) begin
      logic [7:0] d; logic kk; int ones;
      kk = ($urandom_range(9) == 0);
      d  = kk ? {3'($urandom), 5'd28} : 8'($urandom);
      send(d, kk);
      ones = $countones(code);
      `CHECK(ones >= 4 && ones <= 6, "symbol disparity 0 or +-2")
      for (int b = 9; b >= 0; b--) begin
        sum += code[b] ? 1 : -1;
        run = (code[b] == lastbit) ? run + 1 : 1;
        lastbit = code[b];
        if (run > 5) begin failures++; $display("FAIL run length"); end
      end
      `CHECK(sum >= -3 && sum <= 3, "running disparity bounded")
      `CHECK(!derr && dd == d && dk == kk, "decodes back")
    end
    `TB_FINISH
  end
endmodule
