// End-to-end testbench of mupix_telescope at its default size: eight 32x40
// sensors, two FPGAs, two tiles per FPGA, 1.25 Gbit/s serial links.
//
// The testbench plays the PC: it waits for all eight links to lock, issues
// the synchronous reset through the master, checks that both FPGAs' time
// bases agree, and then fires tracks (the same pixel in all eight layers in
// one clock), noise hits, bursts that the priority readout delivers out of
// time order, tile pulses and one pile-up of twelve hits on one time stamp of
// FPGA 1 (more than a sorter bin holds). FPGA 1 is read by polling
// throughout; FPGA 0 starts in polling mode and is switched to DMA into a
// small host ring buffer, whose read pointer the host advances only now and
// then so that the ring fills up. All words are then parsed: block numbers must
// run on without gaps, hits must be in time order inside each block with the
// right trailer counts, every hit fired must arrive exactly once with its
// sensor label, pixel address and 62.5 MHz time stamp (except the pile-up,
// where exactly the bin capacity must arrive and the rest be counted as
// dropped), and every tile pulse must arrive. Each mechanism is counted and a
// mechanism that never happened counts as a failure.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_mupix_telescope;
  import mupix_pkg::*;
  `TB_COUNTERS
  localparam int NPIX = 32 * 40;

  // clocks: bitclk 1.25 GHz, coreclk 125 MHz, fastclk 500 MHz, phase locked
  logic bitclk = 0, coreclk = 0, fastclk = 0, clk_ext = 0, rst_n = 0;
  logic [1:0] clk_osc = 0, clk_sel = 0, pll_ref;
  int ph = 0;
  always #0.4 bitclk = ~bitclk;
  always @(posedge bitclk) begin
    ph = (ph + 1) % 5;
    if (ph == 0) coreclk = ~coreclk;
  end
  always #1 fastclk = ~fastclk;
  always #4 clk_osc[0] = ~clk_osc[0];
  always #4.1 clk_osc[1] = ~clk_osc[1];
  always #3.9 clk_ext = ~clk_ext;

  logic [7:0][NPIX-1:0] pix_hit = '0;
  logic [1:0][1:0]      tile_in = '0;
  logic [1:0]           reg_we = 0, reg_re = 0, reg_rvalid, dma_wr_valid, dma_wr_ready = 2'b11, slave_reset_out;
  logic [1:0][5:0]      reg_addr = '0;
  logic [1:0][31:0]     reg_wdata = '0, reg_rdata, dma_wr_addr, dma_wr_data;

  mupix_telescope dut (.clk_osc, .clk_ext, .clk_sel, .pll_ref, .coreclk, .fastclk, .bitclk, .rst_n,
    .pix_hit, .tile_in, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .dma_wr_valid, .dma_wr_addr, .dma_wr_data, .dma_wr_ready, .slave_reset_out);

  `WATCHDOG(coreclk, 200000)

  // ---------------- register access (one process per FPGA) ----------------
  task automatic wr(input int f, input logic [5:0] a, input logic [31:0] d);
    @(negedge coreclk); reg_we[f] = 1; reg_addr[f] = a; reg_wdata[f] = d;
    @(negedge coreclk); reg_we[f] = 0;
  endtask
  task automatic rd(input int f, input logic [5:0] a, output logic [31:0] d);
    @(negedge coreclk); reg_re[f] = 1; reg_addr[f] = a;
    @(negedge coreclk); reg_re[f] = 0;
    d = reg_rdata[f];
  endtask

  // ---------------- host memory for DMA ----------------
  logic [31:0] hostmem [int];
  localparam logic [31:0] RING_BASE = 32'h0010_0000;
  localparam int RING_WORDS = 16;
  always @(negedge coreclk) begin
    if (dma_wr_valid[0] && dma_wr_ready[0]) hostmem[int'(dma_wr_addr[0])] = dma_wr_data[0];
    `CHECK(!dma_wr_valid[1], "FPGA 1 stays in polling mode")
  end

  // ---------------- mechanism counters ----------------
  int n_sync_rst = 0, n_simul = 0, n_reorder = 0, n_contend = 0, n_ring_full = 0, n_dma = 0;
  int n_poll_words = 0, n_poll_empty = 0, n_mode_switch = 0, n_drop_total = 0, n_ovf_trl = 0;
  int n_tile_blocks = 0, n_clk_ext_edges = 0;
  logic [7:0] last_m_ts; logic last_m_v = 0;
  always @(negedge coreclk) if (rst_n) begin
    if (dut.u_master.sync_rst) n_sync_rst++;
    if ($countones(dut.u_master.hit_valid) > 1 || $countones(dut.u_slave.hit_valid) > 1) n_simul++;
    if (dut.u_master.m_valid) begin
      if (last_m_v && (8'(last_m_ts - dut.u_master.m_hit.ts) inside {[8'd1 : 8'd60]})) n_reorder++;
      last_m_ts = dut.u_master.m_hit.ts; last_m_v = 1;
    end
    if ((dut.u_master.pix_valid && dut.u_master.tile_valid && dut.u_master.u_arb.grant == dut.u_master.u_arb.G_NONE) ||
        (dut.u_slave.pix_valid && dut.u_slave.tile_valid && dut.u_slave.u_arb.grant == dut.u_slave.u_arb.G_NONE)) n_contend++;
    if (dut.u_master.u_dma.ring_full && !dut.u_master.o_empty && dut.u_master.dma_mode) n_ring_full++;
    if (dma_wr_valid[0]) n_dma++;
  end

  // ---------------- stimulus bookkeeping ----------------
  int n = 0;            // core clocks since the synchronous reset edge
  bit counting = 0;
  always @(posedge coreclk) begin
    if (dut.u_master.sync_rst) begin n = 0; counting = 1; end
    else n++;
  end
  // expected hits per FPGA: {label, col, row, ts} as int
  int exp_hits [2][$];
  int pile_keys [$];
  int n_tile_pulses [2] = '{0, 0};

  // a pixel whose earlier hit may still wait for readout is not fired again:
  // the sensor keeps one hit per pixel, so a second one would be merged
  int last_fire [8][NPIX];
  initial foreach (last_fire[l, p]) last_fire[l][p] = -100000;
  task automatic fire(input int layer, input int pix);
    if (n - last_fire[layer][pix] > 1000) begin
      pix_hit[layer][pix] = 1'b1;
      last_fire[layer][pix] = n;
    end
  endtask
  // called after all fire() of one clock, at the negedge before the sampling edge
  task automatic commit(input bit pile = 0);
    int e;
    e = n + 1;  // the next rising edge
    for (int l = 0; l < 8; l++)
      for (int p = 0; p < NPIX; p++)
        if (pix_hit[l][p]) begin
          int key;
          key = {8'(l), 8'(p / 40), 8'(p % 40), 8'((e - 1) / 2)};
          if (pile) pile_keys.push_back(key);
          else exp_hits[l / 4].push_back(key);
        end
    @(negedge coreclk);
    pix_hit = '0;
  endtask

  // ---------------- output parsing ----------------
  logic [31:0] words [2][$];
  int got_hits [2][$];

  task automatic parse(input int f);
    int blk, cnt, in_pix, in_tile, tcnt, last_ts;
    blk = -1; in_pix = 0; in_tile = 0; cnt = 0; tcnt = 0; last_ts = 0;
    foreach (words[f][i]) begin
      logic [31:0] w;
      w = words[f][i];
      case (w[31:28])
        W_PIX_HDR: begin
          if (blk >= 0) `CHECK(int'(w[26:0]) == blk + 1, $sformatf("pixel blocks without gaps %0d after %0d", w[26:0], blk))
          `CHECK(!in_pix, "header after trailer")
          blk = int'(w[26:0]); in_pix = 1; cnt = 0; last_ts = 0;
        end
        W_PIX_HIT: begin
          `CHECK(in_pix, "hit inside a block")
          `CHECK(int'(w[4:0]) >= last_ts, "time order within block")
          `CHECK(w[7:5] == 3'(blk), "hit time stamp belongs to block")
          last_ts = int'(w[4:0]);
          got_hits[f].push_back({8'(w[21:19]), 8'(w[18:14]), 8'(w[13:8]), w[7:0]});
          cnt++;
        end
        W_PIX_TRL: begin
          `CHECK(in_pix && int'(w[15:0]) == cnt, "trailer count")
          if (w[27]) n_ovf_trl++;
          in_pix = 0;
        end
        W_TILE_HDR: begin in_tile = 1; tcnt = 0; n_tile_blocks++; end
        W_TILE_HIT: tcnt++;
        W_TILE_TRL: begin
          `CHECK(in_tile && int'(w[15:0]) == tcnt, "tile trailer count")
          in_tile = 0;
          n_tile_pulses[f] -= tcnt;
        end
        default: `CHECK(0, $sformatf("unknown word type %h at %0d of FPGA %0d", w, i, f))
      endcase
    end
  endtask

  // ---------------- host processes ----------------
  bit run_hosts = 1;
  bit hosts_go = 0;
  bit switch_now = 0;
  initial begin : host1   // FPGA 1: polling
    logic [31:0] v;
    wait (hosts_go);
    while (run_hosts) begin
      rd(1, R_POLL_DATA, v);
      if (v != 0) begin words[1].push_back(v); n_poll_words++; end
      else n_poll_empty++;
    end
  end
  initial begin : host0   // FPGA 0: polling, then DMA
    logic [31:0] v, wp, rp;
    wait (hosts_go);
    while (!switch_now) begin
      rd(0, R_POLL_DATA, v);
      if (v != 0) begin words[0].push_back(v); n_poll_words++; end
      else n_poll_empty++;
    end
    wr(0, R_DMA_BASE, RING_BASE);
    wr(0, R_DMA_MASK, 32'(RING_WORDS - 1));
    wr(0, R_DMA_RDPTR, 32'd0);
    wr(0, R_CTRL, 32'h2);
    n_mode_switch++;
    // a word may still wait in the polling register
    rd(0, R_POLL_DATA, v);
    if (v != 0) words[0].push_back(v);
    rp = 0;
    while (run_hosts) begin
      repeat (10 + $urandom_range(30)) @(negedge coreclk);
      rd(0, R_DMA_WRPTR, wp);
      while (rp != wp) begin
        words[0].push_back(hostmem[int'(RING_BASE + ((rp % RING_WORDS) * 4))]);
        rp++;
      end
      wr(0, R_DMA_RDPTR, rp);
    end
  end

  // ---------------- main sequence ----------------
  initial begin
    logic [31:0] v0, v1;
    int rel;
    repeat (5) @(posedge coreclk);
    rst_n = 1;
    // clock switch: external clock to FPGA 0's PLL
    clk_sel[0] = 1;
    repeat (20) @(posedge coreclk);
    repeat (20) begin @(posedge pll_ref[0]); if (clk_ext && !clk_osc[0]) n_clk_ext_edges++; end
    `CHECK(n_clk_ext_edges > 0, "PLL reference follows the external clock after the switch")
    repeat (200) @(posedge coreclk);
    fork
      rd(0, R_STATUS, v0);
      rd(1, R_STATUS, v1);
    join
    `CHECK(v0[3:0] == 4'hF && v1[3:0] == 4'hF, "all eight links locked")
    `CHECK(v0[8] && !v1[8], "master and slave")
    wr(1, R_CTRL, 32'h0);
    wr(0, R_CTRL, 32'h1);          // synchronous reset, polling mode
    repeat (20) @(posedge coreclk);
    fork
      rd(0, R_TIME, v0);
      rd(1, R_TIME, v1);
    join
    `CHECK(v0 == v1 && v0 < 32'd20, "both time bases reset together")
    `CHECK(n_sync_rst == 1, "one synchronous reset")
    hosts_go = 1;

    for (int c = 0; c < 12000; c++) begin
      @(negedge coreclk);
      if (c == 5000) switch_now = 1;
      if (c >= 7000 && c < 7400) begin
        if (c == 7200) begin
          // pile-up: three pixels in each sensor of FPGA 1 in one clock
          for (int l = 4; l < 8; l++) for (int k = 0; k < 3; k++) fire(l, 100 + 7 * k + l);
          commit(1);
        end
        continue;
      end
      case ($urandom_range(19))
        0: begin   // track through all layers
          int p;
          p = $urandom_range(NPIX - 1);
          for (int l = 0; l < 8; l++) fire(l, p);
          commit();
        end
        1, 2: begin  // noise hit
          fire($urandom_range(7), $urandom_range(NPIX - 1));
          commit();
        end
        3: begin   // burst read out of time order by the priority readout
          int l;
          l = $urandom_range(3);
          fire(l, 1000 + $urandom_range(200)); commit();
          @(negedge coreclk);
          fire(l, 500 + $urandom_range(200)); commit();
          @(negedge coreclk);
          fire(l, $urandom_range(100)); commit();
        end
        4: begin   // tile pulse
          int f, t;
          f = $urandom_range(1); t = $urandom_range(1);
          tile_in[f][t] = 1;
          n_tile_pulses[f]++;
          repeat (3) @(negedge coreclk);
          tile_in[f][t] = 0;
        end
        default: ;
      endcase
    end
    repeat (3000) @(negedge coreclk);
    run_hosts = 0;
    repeat (600) @(negedge coreclk);

    fork
      rd(1, R_DROPS, v1);
      rd(0, R_DROPS, v0);
    join
    n_drop_total = int'(v0 + v1);
    parse(0);
    parse(1);
    // every fired hit exactly once
    for (int f = 0; f < 2; f++) begin
      int miss;
      miss = 0;
      foreach (exp_hits[f][i]) begin
        int idx [$];
        idx = got_hits[f].find_first_index(x) with (x == exp_hits[f][i]);
        if (idx.size() == 0) begin
          miss++;
          $display("missing hit FPGA %0d: label %0d col %0d row %0d ts %0d", f,
                   exp_hits[f][i][31:24], exp_hits[f][i][23:16], exp_hits[f][i][15:8], exp_hits[f][i][7:0]);
        end
        else got_hits[f].delete(idx[0]);
      end
      `CHECK(miss == 0, $sformatf("FPGA %0d: all %0d hits received (%0d missing)", f, exp_hits[f].size(), miss))
      `CHECK(n_tile_pulses[f] == 0, $sformatf("FPGA %0d: all tile pulses received", f))
    end
    // the pile-up: exactly one bin's worth arrived, the rest dropped
    begin
      int arrived;
      arrived = 0;
      foreach (pile_keys[i]) begin
        int idx [$];
        idx = got_hits[1].find_first_index(x) with (x == pile_keys[i]);
        if (idx.size() > 0) begin arrived++; got_hits[1].delete(idx[0]); end
      end
      `CHECK(arrived == 8, "pile-up: sorter bin capacity of 8 delivered")
      `CHECK(pile_keys.size() > 8 && n_drop_total == pile_keys.size() - 8, $sformatf("pile-up: the rest dropped and counted (%0d, %0d)", v0, v1))
    end
    `CHECK(got_hits[0].size() == 0 && got_hits[1].size() == 0, "no extra hits")
    $display("mechanisms: sync_rst=%0d simultaneous=%0d reorder=%0d contention=%0d ring_full=%0d dma=%0d poll_words=%0d poll_empty=%0d mode_switch=%0d overflow_trailers=%0d tile_blocks=%0d hits=%0d/%0d",
      n_sync_rst, n_simul, n_reorder, n_contend, n_ring_full, n_dma, n_poll_words, n_poll_empty, n_mode_switch,
      n_ovf_trl, n_tile_blocks, exp_hits[0].size(), exp_hits[1].size());
    `CHECK(n_simul > 0, "mechanism: simultaneous link arrivals merged")
    `CHECK(n_reorder > 0, "mechanism: out-of-order hits sorted")
    `CHECK(n_contend > 0, "mechanism: pixel and tile blocks contend")
    `CHECK(n_ring_full > 0, "mechanism: DMA ring full stall")
    `CHECK(n_dma > 0, "mechanism: DMA writes")
    `CHECK(n_poll_words > 0 && n_poll_empty > 0, "mechanism: polling with data and empty")
    `CHECK(n_mode_switch == 1, "mechanism: readout mode switch")
    `CHECK(n_ovf_trl > 0, "mechanism: sorter overflow flagged")
    `CHECK(n_tile_blocks > 0, "mechanism: tile blocks")
    `TB_FINISH
  end
endmodule
