// Testbench of dec_8b10b: known symbols from the standard code tables
// (independent of the encoder), all 256 data bytes in both disparities as the
// encoder produces them, and invalid codes that must raise err.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_dec_8b10b;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0;
  logic [9:0] code, ecode;
  logic [7:0] data, edata = 0;
  logic k, err, ek = 0;
  always #4 clk = ~clk;
  dec_8b10b dut (.code, .data, .k, .err);
  enc_8b10b enc (.clk, .rst_n, .data(edata), .k(ek), .code(ecode));
  `WATCHDOG(clk, 10000)

  task automatic known(input logic [9:0] c, input logic [7:0] d, input logic kk, input string name);
    code = c; #1;
    `CHECK(!err && data == d && k == kk, name)
  endtask

  initial begin
    known(10'b0011111010, 8'hBC, 1, "K28.5-");
    known(10'b1100000101, 8'hBC, 1, "K28.5+");
    known(10'b0011110100, 8'h1C, 1, "K28.0-");
    known(10'b1100001011, 8'h1C, 1, "K28.0+");
    known(10'b0011111001, 8'h3C, 1, "K28.1-");
    known(10'b1100000110, 8'h3C, 1, "K28.1+");
    known(10'b1010101010, 8'hB5, 0, "D21.5");
    known(10'b1001110100, 8'h00, 0, "D0.0-");
    known(10'b0110001011, 8'h00, 0, "D0.0+");
    code = 10'b0000000000; #1; `CHECK(err, "all zero invalid")
    code = 10'b1111111111; #1; `CHECK(err, "all one invalid")
    code = 10'b1110001111; #1; `CHECK(err, "4b 1111 invalid")
    // exhaustive through the encoder, two passes for both disparities
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int v = 0; v < 256; v++) begin
        @(negedge clk); edata = 8'(v); ek = 0;
        @(posedge clk); #1; code = ecode; #1;
        `CHECK(!err && data == 8'(v) && !k, "data byte round trip")
      end
    end
    `TB_FINISH
  end
endmodule
