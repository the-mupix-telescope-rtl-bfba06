// Testbench of control_registers: writable registers read back, status inputs
// appear at their addresses one clock after the read, a reset request makes a
// one-clock pulse, and a POLL_DATA read pops.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_control_registers;
  import mupix_pkg::*;
  `TB_COUNTERS
  logic clk = 0, rst_n = 0, reg_we = 0, reg_re = 0, reg_rvalid, reset_req, dma_mode, poll_rd;
  logic [5:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata, dma_base, dma_mask, dma_rdptr;
  int n_req = 0, n_pop = 0;
  always #4 clk = ~clk;
  control_registers dut (.clk, .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .reset_req, .dma_mode, .dma_base, .dma_mask, .dma_rdptr, .dma_wrptr(32'h11), .poll_rd,
    .poll_word(32'h2000_0042), .poll_count(32'h22), .status(32'h133), .hits(32'h44), .drops(32'h55),
    .link_err(32'h66), .tiles(32'h77), .now(32'h88));
  `WATCHDOG(clk, 2000)
  always @(posedge clk) if (rst_n) begin
    if (reset_req) n_req++;
    if (poll_rd) n_pop++;
  end
  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge clk); reg_we = 0;
  endtask
  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge clk); reg_re = 1; reg_addr = a;
    @(negedge clk); reg_re = 0;
    `CHECK(reg_rvalid, "read valid one clock later")
    d = reg_rdata;
  endtask
  initial begin
    logic [31:0] v;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(R_DMA_BASE, 32'hABCD_0000); wr(R_DMA_MASK, 32'hFFF); wr(R_DMA_RDPTR, 32'd77); wr(R_CTRL, 32'h2);
    `CHECK(dma_base == 32'hABCD_0000 && dma_mask == 32'hFFF && dma_rdptr == 77 && dma_mode, "outputs")
    rd(R_DMA_BASE, v); `CHECK(v == 32'hABCD_0000, "base readback")
    rd(R_CTRL, v); `CHECK(v == 32'h2, "ctrl readback")
    rd(R_STATUS, v); `CHECK(v == 32'h133, "status")
    rd(R_DMA_WRPTR, v); `CHECK(v == 32'h11, "wrptr")
    rd(R_HITS, v); `CHECK(v == 32'h44, "hits")
    rd(R_DROPS, v); `CHECK(v == 32'h55, "drops")
    rd(R_LINK_ERR, v); `CHECK(v == 32'h66, "link errors")
    rd(R_TILES, v); `CHECK(v == 32'h77, "tiles")
    rd(R_TIME, v); `CHECK(v == 32'h88, "time")
    rd(R_POLL_CNT, v); `CHECK(v == 32'h22, "poll count")
    `CHECK(n_pop == 0, "no pop yet")
    rd(R_POLL_DATA, v); `CHECK(v == 32'h2000_0042 && n_pop == 1, "poll data pops")
    `CHECK(n_req == 0, "no reset yet")
    wr(R_CTRL, 32'h3);
    @(negedge clk);
    `CHECK(n_req == 1 && dma_mode, "reset request is one pulse")
    `TB_FINISH
  end
endmodule
