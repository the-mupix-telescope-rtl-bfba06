// tile_tdc: time stamps the scintillating-tile signals with a 500 MHz counter.
//
// The discriminated tile signals are synchronized into the 500 MHz domain
// with two flip-flops; a rising edge captures the free-running 500 MHz counter
// for that tile. Captured stamps wait in a per-tile holding register and are
// written one per clock, lowest tile first, as {tile, count} into the output
// FIFO. An edge that finds its tile's holding register still full is lost.
// The counter is cleared by the common synchronous reset, which arrives as a
// 125 MHz-domain pulse and is synchronized and edge detected here; the count is
// therefore eight counts per 62.5 MHz sensor time stamp, with a fixed offset of
// a few counts from the synchronizer.
// Interface: fastclk domain throughout; wr_en/wdata feed an async_fifo.
// The 500 MHz sampling counter is the paper's; the rest is this design's.
module tile_tdc #(
  parameter int N_TILES  = 2,
  parameter int CNT_BITS = 32,
  parameter int TW       = 1
) (
  input  logic                   fastclk,
  input  logic                   rst_n,
  input  logic                   sync_rst,   // 125 MHz-domain pulse
  input  logic [N_TILES-1:0]     tile_in,
  input  logic                   fifo_full,
  output logic                   wr_en,
  output logic [TW+CNT_BITS-1:0] wdata
);
  logic [CNT_BITS-1:0]              count;
  logic [N_TILES-1:0]               s1, s2, s3;
  logic [2:0]                       rs;
  logic [N_TILES-1:0]               pend;
  logic [N_TILES-1:0][CNT_BITS-1:0] stamp;
  logic                             clr;
  logic                             any;
  logic [TW-1:0]                    pick;

  assign clr = rs[1] && !rs[2];

  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int i = N_TILES - 1; i >= 0; i--) begin
      if (pend[i]) begin
        any  = 1'b1;
        pick = TW'(i);
      end
    end
  end

  always_ff @(posedge fastclk or negedge rst_n) begin
    if (!rst_n) begin
      s1 <= '0; s2 <= '0; s3 <= '0; rs <= '0;
      count <= '0;
      pend  <= '0;
      stamp <= '0;
      wr_en <= 1'b0;
      wdata <= '0;
    end else begin
      s1 <= tile_in; s2 <= s1; s3 <= s2;
      rs <= {rs[1:0], sync_rst};
      count <= clr ? '0 : count + 1'b1;
      wr_en <= 1'b0;
      if (any && !fifo_full) begin
        wr_en      <= 1'b1;
        wdata      <= {pick, stamp[pick]};
        pend[pick] <= 1'b0;
      end
      for (int i = 0; i < N_TILES; i++) begin
        if (s2[i] && !s3[i] && !(pend[i] && !(any && !fifo_full && pick == TW'(i)))) begin
          pend[i]  <= 1'b1;
          stamp[i] <= count;
        end
      end
    end
  end
endmodule
