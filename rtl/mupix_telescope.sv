// mupix_telescope: readout of the MuPix pixel telescope.
//
// The telescope is a stack of up to eight thin MuPix7 pixel sensors between
// two scintillating tiles. Each sensor stamps its hits with an 8-bit 62.5 MHz
// time stamp and sends them self-triggered over a 1.25 Gbit/s 8b/10b link.
// Two FPGAs read four sensors each: they decode the links, label, merge and
// time-sort the hits into blocks of 32 time stamps, time stamp the tile
// signals with a 500 MHz counter, and hand the blocks to the PC by DMA or by
// polling. For all time stamps to agree, every chip runs from one external
// clock and all counters are cleared by one synchronous reset made by the
// master FPGA (FPGA 0): its reset_1 output is looped back into its own reset
// input and its reset_2 output drives the slave's (FPGA 1) reset input. The
// slave's own reset outputs are unused and brought out only as ports.
//
// This module holds the digital part of the eight sensors (mupix7_digital),
// the two FPGA readout cores (fpga_readout_core), the reset cabling and each
// FPGA's clock switch (clock_switch). The PLLs are not included: the switch
// output of each FPGA leaves as pll_ref, and the PLL clocks (coreclk 125 MHz,
// fastclk 500 MHz, bitclk 1.25 GHz, shared because both PLLs lock to the same
// external clock) come back in as ports. The pixel comparator outputs
// (pix_hit), the tile discriminator outputs, the PCIe register buses and DMA
// write buses are ports as well. Sensor layer L is link L mod 4 of FPGA L / 4.
module mupix_telescope
  import mupix_pkg::*;
#(
  parameter int N_LAYERS = 8,
  parameter int N_COLS   = 32,
  parameter int N_ROWS   = 40,
  parameter int N_TILES  = 2
) (
  // clocks
  input  logic [1:0]                                  clk_osc,
  input  logic                                        clk_ext,
  input  logic [1:0]                                  clk_sel,
  output logic [1:0]                                  pll_ref,
  input  logic                                        coreclk,
  input  logic                                        fastclk,
  input  logic                                        bitclk,
  input  logic                                        rst_n,
  // detector signals
  input  logic [N_LAYERS-1:0][N_COLS*N_ROWS-1:0]      pix_hit,
  input  logic [1:0][N_TILES-1:0]                     tile_in,
  // PCIe side, per FPGA
  input  logic [1:0]                                  reg_we,
  input  logic [1:0]                                  reg_re,
  input  logic [1:0][5:0]                             reg_addr,
  input  logic [1:0][31:0]                            reg_wdata,
  output logic [1:0][31:0]                            reg_rdata,
  output logic [1:0]                                  reg_rvalid,
  output logic [1:0]                                  dma_wr_valid,
  output logic [1:0][31:0]                            dma_wr_addr,
  output logic [1:0][31:0]                            dma_wr_data,
  input  logic [1:0]                                  dma_wr_ready,
  // unused reset outputs of the slave
  output logic [1:0]                                  slave_reset_out
);
  localparam int LPF = N_LAYERS / 2;  // sensors per FPGA

  logic [N_LAYERS-1:0] sout;
  logic [1:0]          sensor_rst;
  logic                m_reset_1, m_reset_2;

  for (genvar f = 0; f < 2; f++) begin : g_clk
    clock_switch u_sw (
      .clk_int(clk_osc[f]), .clk_ext, .rst_n, .sel(clk_sel[f]), .clk_out(pll_ref[f])
    );
  end

  for (genvar l = 0; l < N_LAYERS; l++) begin : g_sensor
    mupix7_digital #(.N_COLS(N_COLS), .N_ROWS(N_ROWS)) u_mupix (
      .clk(coreclk), .bitclk, .rst_n, .sync_rst(sensor_rst[l / LPF]),
      .hit_in(pix_hit[l]), .sout(sout[l])
    );
  end

  fpga_readout_core #(.FPGA_ID(0), .MASTER(1'b1), .N_LINKS(LPF), .N_TILES(N_TILES)) u_master (
    .coreclk, .fastclk, .bitclk, .rst_n,
    .sin(sout[LPF-1:0]), .sensor_sync_rst(sensor_rst[0]), .tile_in(tile_in[0]),
    .reset_in(m_reset_1), .reset_1(m_reset_1), .reset_2(m_reset_2),
    .reg_we(reg_we[0]), .reg_re(reg_re[0]), .reg_addr(reg_addr[0]), .reg_wdata(reg_wdata[0]),
    .reg_rdata(reg_rdata[0]), .reg_rvalid(reg_rvalid[0]),
    .dma_wr_valid(dma_wr_valid[0]), .dma_wr_addr(dma_wr_addr[0]),
    .dma_wr_data(dma_wr_data[0]), .dma_wr_ready(dma_wr_ready[0])
  );

  fpga_readout_core #(.FPGA_ID(1), .MASTER(1'b0), .N_LINKS(LPF), .N_TILES(N_TILES)) u_slave (
    .coreclk, .fastclk, .bitclk, .rst_n,
    .sin(sout[N_LAYERS-1:LPF]), .sensor_sync_rst(sensor_rst[1]), .tile_in(tile_in[1]),
    .reset_in(m_reset_2), .reset_1(slave_reset_out[0]), .reset_2(slave_reset_out[1]),
    .reg_we(reg_we[1]), .reg_re(reg_re[1]), .reg_addr(reg_addr[1]), .reg_wdata(reg_wdata[1]),
    .reg_rdata(reg_rdata[1]), .reg_rvalid(reg_rvalid[1]),
    .dma_wr_valid(dma_wr_valid[1]), .dma_wr_addr(dma_wr_addr[1]),
    .dma_wr_data(dma_wr_data[1]), .dma_wr_ready(dma_wr_ready[1])
  );
endmodule
