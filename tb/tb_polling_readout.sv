// Testbench of polling_readout: register reads return the stream words in
// order, 0 when nothing is buffered, and the served counter counts them; clr
// empties the holding register.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_polling_readout;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, rd = 0, clr = 0;
  logic [31:0] in_data = 0, word, served;
  int sent = 0, got = 0, empties = 0;
  always #4 clk = ~clk;
  polling_readout dut (.clk, .rst_n, .clr, .enable(1'b1), .in_data, .in_valid, .in_ready, .rd, .word, .served);
  `WATCHDOG(clk, 20000)
  always begin
    logic acc, r; logic [31:0] w;
    @(negedge clk); #3;
    acc = in_valid && in_ready; r = rd; w = word;
    @(posedge clk); #1;
    if (acc) sent++;
    if (r) begin
      if (w == 0) empties++;
      else begin
        `CHECK(w == 32'(got + 100), "word order")
        got++;
      end
    end
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      in_valid = (c < 1000) ? ($urandom_range(3) == 0) : 1'b0;
      in_data = 32'(sent + 100);
      rd = $urandom_range(2) == 0;
    end
    @(negedge clk) rd = 0;
    repeat (2) @(posedge clk);
    `CHECK(got == sent && got > 100, "all words read")
    `CHECK(served == 32'(got), "served counter")
    `CHECK(empties > 0, "empty reads return 0")
    // clr drops a buffered word
    @(negedge clk); in_valid = 1; in_data = 32'hABCD;
    @(negedge clk); in_valid = 0;
    `CHECK(word == 32'hABCD, "word buffered")
    clr = 1;
    @(negedge clk); clr = 0;
    `CHECK(word == 32'd0, "clr empties the register")
    `TB_FINISH
  end
endmodule
