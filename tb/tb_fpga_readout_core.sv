// Testbench of fpga_readout_core, set up as the slave FPGA (FPGA_ID 1): four
// small sensors (4 x 4 pixels, mupix7_digital) feed its links, two tiles its
// TDC. The test pulses the external reset input as the master would, checks
// that the sensors' reset follows, waits for link lock (STATUS), fires random
// pixel hits and tile pulses, reads the output first by polling and then by
// DMA, and checks: every hit arrives once with the sensor label 4..7, its
// pixel address and its 62.5 MHz time stamp; pixel blocks run on without gaps
// and are time ordered; trailer counts match; every tile pulse arrives; the
// HITS and TILES counters agree with what was sent.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_fpga_readout_core;
  import mupix_pkg::*;
  `TB_COUNTERS
  localparam int NC = 4, NR = 4, NP = NC * NR;

  logic bitclk = 0, coreclk = 0, fastclk = 0, rst_n = 0;
  int ph = 0;
  always #0.4 bitclk = ~bitclk;
  always @(posedge bitclk) begin
    ph = (ph + 1) % 5;
    if (ph == 0) coreclk = ~coreclk;
  end
  always #1 fastclk = ~fastclk;

  logic [3:0][NP-1:0] pix = '0;
  logic [3:0] sin;
  logic [1:0] tile_in = '0;
  logic sensor_sync_rst, reset_in = 0, reset_1, reset_2;
  logic reg_we = 0, reg_re = 0, reg_rvalid, dma_wr_valid, dma_wr_ready = 1;
  logic [5:0] reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata, dma_wr_addr, dma_wr_data;

  for (genvar i = 0; i < 4; i++) begin : g_s
    mupix7_digital #(.N_COLS(NC), .N_ROWS(NR)) u_s (
      .clk(coreclk), .bitclk, .rst_n, .sync_rst(sensor_sync_rst), .hit_in(pix[i]), .sout(sin[i]));
  end
  fpga_readout_core #(.FPGA_ID(1), .MASTER(1'b0)) dut (
    .coreclk, .fastclk, .bitclk, .rst_n, .sin, .sensor_sync_rst, .tile_in,
    .reset_in, .reset_1, .reset_2, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .dma_wr_valid, .dma_wr_addr, .dma_wr_data, .dma_wr_ready);
  `WATCHDOG(coreclk, 100000)

  task automatic wr(input logic [5:0] a, input logic [31:0] d);
    @(negedge coreclk); reg_we = 1; reg_addr = a; reg_wdata = d;
    @(negedge coreclk); reg_we = 0;
  endtask
  task automatic rd(input logic [5:0] a, output logic [31:0] d);
    @(negedge coreclk); reg_re = 1; reg_addr = a;
    @(negedge coreclk); reg_re = 0;
    d = reg_rdata;
  endtask

  int n = 0;
  always @(posedge coreclk) n = dut.sync_rst ? 0 : n + 1;
  logic [31:0] hostmem [int];
  always @(negedge coreclk) if (dma_wr_valid) hostmem[int'(dma_wr_addr)] = dma_wr_data;

  int exp_hits [$], got [$], n_tiles_sent = 0, n_tile_words = 0;
  logic [31:0] words [$];
  int last_fire [4][NP];
  bit stop = 0, go = 0, to_dma = 0;

  initial begin : host
    logic [31:0] v, wp;
    int rp;
    wait (go);
    while (!to_dma) begin
      rd(R_POLL_DATA, v);
      if (v != 0) words.push_back(v);
    end
    wr(R_DMA_BASE, 32'h4000);
    wr(R_DMA_MASK, 32'd31);
    wr(R_CTRL, 32'h2);
    rd(R_POLL_DATA, v);
    if (v != 0) words.push_back(v);
    rp = 0;
    while (!stop) begin
      repeat (20) @(negedge coreclk);
      rd(R_DMA_WRPTR, wp);
      while (rp != int'(wp)) begin
        words.push_back(hostmem[32'h4000 + (rp % 32) * 4]);
        rp++;
      end
      wr(R_DMA_RDPTR, 32'(rp));
    end
  end

  initial begin
    logic [31:0] v;
    int blk, cnt, last_ts, nh, nt;
    foreach (last_fire[i, p]) last_fire[i][p] = -100000;
    repeat (4) @(posedge coreclk);
    rst_n = 1;
    repeat (300) @(posedge coreclk);
    rd(R_STATUS, v);
    `CHECK(v[3:0] == 4'hF, "four links locked")
    `CHECK(!v[8], "slave")
    // reset arrives on the cable from the master
    @(negedge coreclk); reset_in = 1;
    repeat (6) @(negedge coreclk);
    `CHECK(sensor_sync_rst == 0, "one reset pulse")
    reset_in = 0;
    `CHECK(n < 6, "reset taken from the cable and forwarded")
    go = 1;
    for (int c = 0; c < 6000; c++) begin
      @(negedge coreclk);
      if (c == 3000) to_dma = 1;
      if ($urandom_range(5) == 0) begin
        int s, p;
        s = $urandom_range(3); p = $urandom_range(NP - 1);
        if (n - last_fire[s][p] > 400) begin
          last_fire[s][p] = n;
          pix[s][p] = 1;
          exp_hits.push_back({8'(4 + s), 8'(p / NR), 8'(p % NR), 8'(n / 2)});
          @(negedge coreclk);
          pix = '0;
        end
      end else if ($urandom_range(40) == 0) begin
        tile_in[$urandom_range(1)] = 1;
        n_tiles_sent++;
        repeat (3) @(negedge coreclk);
        tile_in = '0;
      end
    end
    repeat (2000) @(negedge coreclk);
    stop = 1;
    repeat (100) @(negedge coreclk);
    // parse
    blk = -1; cnt = 0; last_ts = 0; nh = 0; nt = 0;
    foreach (words[i]) begin
      case (words[i][31:28])
        W_PIX_HDR: begin
          if (blk >= 0) `CHECK(int'(words[i][26:0]) == blk + 1, "consecutive blocks")
          blk = int'(words[i][26:0]); cnt = 0; last_ts = 0;
        end
        W_PIX_HIT: begin
          `CHECK(int'(words[i][4:0]) >= last_ts, "time order")
          last_ts = int'(words[i][4:0]);
          got.push_back({8'(words[i][21:19]), 8'(words[i][18:14]), 8'(words[i][13:8]), words[i][7:0]});
          cnt++;
        end
        W_PIX_TRL: `CHECK(int'(words[i][15:0]) == cnt, "trailer count")
        W_TILE_HDR: nt = 0;
        W_TILE_HIT: begin nt++; n_tile_words++; end
        W_TILE_TRL: `CHECK(int'(words[i][15:0]) == nt, "tile trailer count")
        default: `CHECK(0, "word type")
      endcase
    end
    foreach (exp_hits[i]) begin
      int idx [$];
      idx = got.find_first_index(x) with (x == exp_hits[i]);
      `CHECK(idx.size() == 1, $sformatf("hit %h received", exp_hits[i]))
      if (idx.size() > 0) got.delete(idx[0]);
    end
    `CHECK(got.size() == 0, "no extra hits")
    `CHECK(n_tile_words == n_tiles_sent && n_tiles_sent > 0, "all tile pulses")
    rd(R_HITS, v);
    `CHECK(v == 32'(exp_hits.size()), "HITS counter")
    rd(R_TILES, v);
    `CHECK(v == 32'(n_tiles_sent), "TILES counter")
    `CHECK(blk > 100, "blocks were produced")
    `TB_FINISH
  end
endmodule
