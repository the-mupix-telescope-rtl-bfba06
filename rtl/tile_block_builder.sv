// tile_block_builder: packs tile time stamps into blocks.
//
// Tile stamps arrive in time order from the 500 MHz TDC. A tile block spans
// 2^BLOCK_SHIFT counts of the 500 MHz counter; with BLOCK_SHIFT = 8 that is
// 512 ns, the same window as one pixel block of 32 time stamps. The builder
// waits until the present time (now, the 62.5 MHz extended time stamp) is two
// blocks past the window of the stamp at the FIFO head; by then every stamp of
// that window is in the FIFO. It then sends the block in one burst: a header,
// one word per stamp of the window, and a trailer with the hit count. Blocks
// without tile hits are not emitted.
// Interface: FIFO head in (empty/rd_en, first-word fall-through), a
// valid/ready stream of 32-bit words out; out_last marks the trailer.
// Creating tile blocks in parallel with the pixel blocks is the paper's; window
// alignment, closing rule and word format are this design's.
module tile_block_builder
  import mupix_pkg::*;
#(
  parameter int CNT_BITS    = 32,
  parameter int TW          = 1,
  parameter int BLOCK_SHIFT = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   sync_rst,
  input  logic [31:0]            now,
  input  logic                   fifo_empty,
  input  logic [TW+CNT_BITS-1:0] fifo_data,
  output logic                   fifo_rd,
  output logic [31:0]            out_data,
  output logic                   out_valid,
  output logic                   out_last,
  input  logic                   out_ready
);
  localparam int BW = CNT_BITS - BLOCK_SHIFT;

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_OPEN, S_TRL} state_e;
  state_e state;

  logic [BW-1:0]       blk, hit_blk, now_blk;
  logic [15:0]         nhits;
  logic [TW-1:0]       tile;
  logic [CNT_BITS-1:0] stamp;

  assign {tile, stamp} = fifo_data;
  assign hit_blk = stamp[CNT_BITS-1:BLOCK_SHIFT];
  // 62.5 MHz time stamp -> 500 MHz count is x8, so block = now >> (BLOCK_SHIFT - 3)
  assign now_blk = BW'(now >> (BLOCK_SHIFT - 3));

  always_comb begin
    out_valid = 1'b0;
    out_last  = 1'b0;
    out_data  = '0;
    fifo_rd   = 1'b0;
    unique case (state)
      S_HDR: begin
        out_valid = 1'b1;
        out_data  = {W_TILE_HDR, 4'd0, 24'(blk)};
      end
      S_OPEN: begin
        if (!fifo_empty && hit_blk == blk) begin
          out_valid = 1'b1;
          out_data  = {W_TILE_HIT, 4'(tile), stamp[23:0]};
          fifo_rd   = out_ready;
        end
      end
      S_TRL: begin
        out_valid = 1'b1;
        out_last  = 1'b1;
        out_data  = {W_TILE_TRL, 12'd0, nhits};
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      blk   <= '0;
      nhits <= '0;
    end else if (sync_rst) begin
      state <= S_IDLE;
      nhits <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (!fifo_empty && (now_blk - hit_blk) >= BW'(2)) begin
          blk   <= hit_blk;
          nhits <= '0;
          state <= S_HDR;
        end
        S_HDR: if (out_ready) state <= S_OPEN;
        S_OPEN: begin
          if (!fifo_empty && hit_blk == blk) begin
            if (out_ready) nhits <= nhits + 1'b1;
          end else if (!fifo_empty || (now_blk - blk) >= BW'(2)) begin
            state <= S_TRL;
          end
        end
        S_TRL: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
