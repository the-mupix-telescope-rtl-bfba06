// Testbench of time_sorter: hits arrive out of time order (up to DELAY+20
// time stamps old) and with bursts on one time stamp. A reference model keeps
// the accepted hits per extended time stamp; the output must be, block after
// block, a header with the block number, the hits in time order (arrival
// order within one time stamp) and a trailer with the hit count. Late hits and
// hits beyond SLOTS per time stamp must be dropped and counted, and the
// overflow flag must appear in a trailer. The output is stalled at times.
`timescale 1ns/1ps
`include "tb_check.svh"
module tb_time_sorter;
  import mupix_pkg::*;
  `TB_COUNTERS
  localparam int SLOTS = 8, DELAY = 64;
  logic clk = 0, rst_n = 0, sync_rst = 0, tick = 0, in_valid = 0, out_valid, out_last, out_ready = 1, drop;
  logic [7:0] now = 0;
  hit_t in_hit;
  logic [31:0] out_data;
  int now_ext = 0;
  int n_drop = 0, exp_drop = 0, n_late = 0, n_full = 0, n_ovf_trl = 0, n_stall = 0;
  logic [31:0] got [$];
  hit_t binq [int][$];
  always #4 clk = ~clk;
  time_sorter #(.SLOTS(SLOTS), .DELAY(DELAY)) dut (.clk, .rst_n, .sync_rst, .tick, .now, .in_hit, .in_valid,
    .out_data, .out_valid, .out_last, .out_ready, .drop);
  `WATCHDOG(clk, 60000)
  always @(posedge clk) if (rst_n) begin
    if (tick) begin now <= now + 1; now_ext <= now_ext + 1; end
    if (drop) n_drop++;
    if (out_valid && out_ready) got.push_back(out_data);
    if (out_valid && !out_ready) n_stall++;
  end
  always @(negedge clk) tick <= !tick;

  task automatic offer(input int age, input hit_t h);
    int e;
    e = now_ext - age;
    h.ts = 8'(e);
    in_hit = h; in_valid = 1;
    if (age >= DELAY || e < 0) begin exp_drop++; n_late++; end
    else if (binq[e].size() >= SLOTS) begin exp_drop++; n_full++; end
    else binq[e].push_back(h);
  endtask

  initial begin
    int nblk;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); sync_rst = 1;
    @(negedge clk); sync_rst = 0;
    now = 0; now_ext = 0;
    repeat (DELAY * 2) @(negedge clk);
    for (int c = 0; c < 12000; c++) begin
      @(negedge clk);
      in_valid = 0;
      out_ready = ((c / 500) % 4 == 3) ? ($urandom_range(1) == 1) : 1'b1;
      if (c == 3000) begin
        // burst on one time stamp: SLOTS + 3 hits
 int e0;
        e0 = now_ext - 5;
        for (int b = 0; b < SLOTS + 3; b++) begin
          offer(now_ext - e0, '{label: 3'(b), col: 5'(b), row: 6'(b), ts: 0});
          @(negedge clk);
        end
        in_valid = 0;
      end else if ($urandom_range(3) == 0) begin
        int age;
        age = ($urandom_range(15) == 0) ? DELAY + $urandom_range(20) : $urandom_range(DELAY - 1);
        offer(age, '{label: 3'($urandom), col: 5'($urandom), row: 6'($urandom), ts: 0});
      end
    end
    @(negedge clk) in_valid = 0; out_ready = 1;
    repeat (DELAY * 2 + 200) @(negedge clk);
    // compare
    nblk = now_ext / 32 - 4;
    begin
      int p = 0;
      for (int b = 0; b < nblk; b++) begin
        int cnt;
        cnt = 0;
        `CHECK(p < got.size() && got[p] == {W_PIX_HDR, 1'b0, 27'(b)}, $sformatf("header of block %0d", b))
        p++;
        for (int t = b * 32; t < b * 32 + 32; t++) begin
          foreach (binq[t][i]) begin
            `CHECK(p < got.size() && got[p] == {W_PIX_HIT, 6'd0, binq[t][i]}, $sformatf("hit at ts %0d", t))
            p++; cnt++;
          end
        end
        `CHECK(p < got.size() && got[p][31:28] == W_PIX_TRL && got[p][15:0] == 16'(cnt), $sformatf("trailer of block %0d", b))
        if (p < got.size() && got[p][27]) n_ovf_trl++;
        p++;
      end
    end
    `CHECK(n_late > 0 && n_full >= 3, "late and bin-full hits were offered")
    `CHECK(n_drop == exp_drop, "drops counted")
    `CHECK(n_ovf_trl > 0, "overflow flag reported")
    `CHECK(n_stall > 0, "back pressure happened")
    `TB_FINISH
  end
endmodule
