// fpga_readout_core: the firmware of one readout FPGA.
//
// One FPGA serves four sensors and the scintillating tiles. Each sensor link
// is deserialized and word aligned (deserializer), 8b/10b decoded (dec_8b10b)
// and unpacked into hits that carry a sensor label (link_unpacker). The four
// hit streams are merged (hit_merger) and sorted by time stamp into blocks of
// 32 time stamps (time_sorter). In parallel the tile signals are time stamped
// with a 500 MHz counter (tile_tdc), cross into the 125 MHz domain
// (async_fifo) and are packed into tile blocks (tile_block_builder). Whole
// blocks of both kinds are interleaved (block_arbiter) into the output FIFO,
// which is drained either by the DMA engine into a host ring buffer or by the
// CPU through register reads (polling_readout), as the readout-mode bit
// selects. The control register file is reached over PCIe. The FPGA time
// base (ts_counter) and the tile counter are cleared by the common
// synchronous reset (reset_distributor), which is also forwarded to the
// sensors so that their time stamps count in step with the FPGA's. The same
// reset empties the output FIFO and the polling register, so that a run
// starts with pixel block 0 and no words from before it.
//
// Clocks: coreclk 125 MHz, fastclk 500 MHz and bitclk 1.25 GHz, all from the
// PLL and phase locked. The PCIe endpoint is outside: the register bus and
// the DMA write bus are ports.
// The chain of functions follows the paper; buffer sizes, formats and
// protocols are this design's (see the module headers).
module fpga_readout_core
  import mupix_pkg::*;
#(
  parameter int FPGA_ID      = 0,
  parameter bit MASTER       = 1'b1,
  parameter int N_LINKS      = 4,
  parameter int N_TILES      = 2,
  parameter int OUT_DEPTH    = 1024,
  parameter int SORT_SLOTS   = 8,
  parameter int SORT_DELAY   = 64
) (
  input  logic               coreclk,
  input  logic               fastclk,
  input  logic               bitclk,
  input  logic               rst_n,
  // sensors
  input  logic [N_LINKS-1:0] sin,
  output logic               sensor_sync_rst,
  // tiles
  input  logic [N_TILES-1:0] tile_in,
  // reset cabling
  input  logic               reset_in,
  output logic               reset_1,
  output logic               reset_2,
  // register bus from the PCIe endpoint
  input  logic               reg_we,
  input  logic               reg_re,
  input  logic [5:0]         reg_addr,
  input  logic [31:0]        reg_wdata,
  output logic [31:0]        reg_rdata,
  output logic               reg_rvalid,
  // DMA write requests to the PCIe endpoint
  output logic               dma_wr_valid,
  output logic [31:0]        dma_wr_addr,
  output logic [31:0]        dma_wr_data,
  input  logic               dma_wr_ready
);
  localparam int TW = (N_TILES > 1) ? $clog2(N_TILES) : 1;
  localparam int CB = 32;

  // ---------------- time base and reset ----------------
  logic        sync_rst, reset_req, tick;
  logic [31:0] now;

  reset_distributor #(.MASTER(MASTER)) u_rst (
    .clk(coreclk), .rst_n, .reset_req, .reset_in, .reset_1, .reset_2, .sync_rst
  );
  assign sensor_sync_rst = sync_rst;

  ts_counter #(.PRESCALE(2), .WIDTH(32)) u_ts (
    .clk(coreclk), .rst_n, .sync_rst, .tick, .ts(now)
  );

  // ---------------- link receivers ----------------
  logic [N_LINKS-1:0]        locked, hit_valid, frame_err, code_err, kchar;
  logic [N_LINKS-1:0][9:0]   word;
  logic [N_LINKS-1:0][7:0]   byte_d;
  hit_t [N_LINKS-1:0]        hit;

  for (genvar i = 0; i < N_LINKS; i++) begin : g_link
    deserializer #(.W(10)) u_des (
      .word_clk(coreclk), .bitclk, .rst_n, .sin(sin[i]), .word(word[i]), .locked(locked[i])
    );
    dec_8b10b u_dec (
      .code(word[i]), .data(byte_d[i]), .k(kchar[i]), .err(code_err[i])
    );
    link_unpacker #(.LABEL(LABEL_BITS'((FPGA_ID * N_LINKS + i) % (1 << LABEL_BITS)))) u_unp (
      .clk(coreclk), .rst_n, .locked(locked[i]), .data(byte_d[i]), .k(kchar[i]),
      .code_err(code_err[i]), .hit(hit[i]), .hit_valid(hit_valid[i]), .frame_err(frame_err[i])
    );
  end

  // ---------------- merge and sort ----------------
  hit_t        m_hit;
  logic        m_valid, m_drop, s_drop;
  logic [31:0] pix_data;
  logic        pix_valid, pix_last, pix_ready;

  hit_merger #(.N_LINKS(N_LINKS), .FIFO_DEPTH(16)) u_merge (
    .clk(coreclk), .rst_n, .clr(sync_rst), .in_hit(hit), .in_valid(hit_valid),
    .out_hit(m_hit), .out_valid(m_valid), .drop(m_drop)
  );

  time_sorter #(.SLOTS(SORT_SLOTS), .DELAY(SORT_DELAY), .TS_PER_BLOCK(TS_PER_BLOCK)) u_sort (
    .clk(coreclk), .rst_n, .sync_rst, .tick, .now(now[TS_BITS-1:0]),
    .in_hit(m_hit), .in_valid(m_valid),
    .out_data(pix_data), .out_valid(pix_valid), .out_last(pix_last), .out_ready(pix_ready),
    .drop(s_drop)
  );

  // ---------------- tiles ----------------
  logic                 t_wr, t_full, t_empty, t_rd;
  logic [TW+CB-1:0]     t_wdata, t_rdata;
  logic [31:0]          tile_data;
  logic                 tile_valid, tile_last, tile_ready;

  tile_tdc #(.N_TILES(N_TILES), .CNT_BITS(CB), .TW(TW)) u_tdc (
    .fastclk, .rst_n, .sync_rst, .tile_in, .fifo_full(t_full),
    .wr_en(t_wr), .wdata(t_wdata)
  );

  async_fifo #(.WIDTH(TW+CB), .DEPTH(32)) u_tfifo (
    .wclk(fastclk), .wrst_n(rst_n), .wr_en(t_wr), .wdata(t_wdata), .full(t_full),
    .rclk(coreclk), .rrst_n(rst_n), .rd_en(t_rd), .rdata(t_rdata), .empty(t_empty)
  );

  tile_block_builder #(.CNT_BITS(CB), .TW(TW), .BLOCK_SHIFT(8)) u_tblk (
    .clk(coreclk), .rst_n, .sync_rst, .now, .fifo_empty(t_empty), .fifo_data(t_rdata),
    .fifo_rd(t_rd), .out_data(tile_data), .out_valid(tile_valid), .out_last(tile_last),
    .out_ready(tile_ready)
  );

  // ---------------- output buffer and readout ----------------
  logic [31:0] a_data, o_data, poll_word, poll_count, dma_wrptr;
  logic        a_valid, o_full, o_empty, o_rd;
  logic        dma_mode, dma_in_ready, poll_in_ready, poll_rd;
  logic [31:0] dma_base, dma_mask, dma_rdptr;

  block_arbiter u_arb (
    .clk(coreclk), .rst_n,
    .a_data(pix_data), .a_valid(pix_valid), .a_last(pix_last), .a_ready(pix_ready),
    .b_data(tile_data), .b_valid(tile_valid), .b_last(tile_last), .b_ready(tile_ready),
    .out_data(a_data), .out_valid(a_valid), .out_ready(!o_full)
  );

  sync_fifo #(.WIDTH(32), .DEPTH(OUT_DEPTH)) u_ofifo (
    .clk(coreclk), .rst_n, .clr(sync_rst), .wr_en(a_valid), .wdata(a_data),
    .rd_en(o_rd), .rdata(o_data), .full(o_full), .empty(o_empty), .level()
  );

  assign o_rd = dma_mode ? dma_in_ready : poll_in_ready;

  dma_engine #(.ADDR_W(32)) u_dma (
    .clk(coreclk), .rst_n, .enable(dma_mode), .base(dma_base), .mask(dma_mask),
    .rdptr(dma_rdptr), .wrptr(dma_wrptr),
    .in_data(o_data), .in_valid(!o_empty && dma_mode), .in_ready(dma_in_ready),
    .wr_valid(dma_wr_valid), .wr_addr(dma_wr_addr), .wr_data(dma_wr_data), .wr_ready(dma_wr_ready)
  );

  polling_readout u_poll (
    .clk(coreclk), .rst_n, .clr(sync_rst), .enable(!dma_mode),
    .in_data(o_data), .in_valid(!o_empty && !dma_mode), .in_ready(poll_in_ready),
    .rd(poll_rd), .word(poll_word), .served(poll_count)
  );

  // ---------------- counters and registers ----------------
  logic [31:0] n_hits, n_drops, n_err, n_tiles;

  always_ff @(posedge coreclk or negedge rst_n) begin
    if (!rst_n) begin
      n_hits <= '0; n_drops <= '0; n_err <= '0; n_tiles <= '0;
    end else begin
      n_hits  <= n_hits + 32'($countones(hit_valid));
      n_err   <= n_err + 32'($countones(frame_err));
      n_drops <= n_drops + 32'(m_drop) + 32'(s_drop);
      n_tiles <= n_tiles + 32'(t_rd);
    end
  end

  control_registers u_regs (
    .clk(coreclk), .rst_n, .reg_we, .reg_re, .reg_addr, .reg_wdata, .reg_rdata, .reg_rvalid,
    .reset_req, .dma_mode, .dma_base, .dma_mask, .dma_rdptr, .dma_wrptr,
    .poll_rd, .poll_word, .poll_count,
    .status({23'd0, MASTER, 4'd0, 4'(locked)}),
    .hits(n_hits), .drops(n_drops), .link_err(n_err), .tiles(n_tiles), .now
  );
endmodule
