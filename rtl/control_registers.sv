// control_registers: the register file the PC reaches over PCIe.
//
// Holds the settings of the readout (readout mode DMA or polling, DMA ring
// buffer base and size, host read pointer) and returns status and counters.
// Writing 1 to bit 0 of CTRL requests a synchronous reset (a one-cycle
// pulse; only the master FPGA acts on it). Reading POLL_DATA returns the next
// output word and pops it (poll_rd pulse). Word addresses are in mupix_pkg.
// Interface: reg_we/reg_re with reg_addr; read data appear registered one
// clock after reg_re with reg_rvalid. The register map is this design's; the
// paper names a control register block steered from a GUI on the PC.
module control_registers
  import mupix_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        reg_we,
  input  logic        reg_re,
  input  logic [5:0]  reg_addr,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output logic        reg_rvalid,
  output logic        reset_req,
  output logic        dma_mode,
  output logic [31:0] dma_base,
  output logic [31:0] dma_mask,
  output logic [31:0] dma_rdptr,
  input  logic [31:0] dma_wrptr,
  output logic        poll_rd,
  input  logic [31:0] poll_word,
  input  logic [31:0] poll_count,
  input  logic [31:0] status,
  input  logic [31:0] hits,
  input  logic [31:0] drops,
  input  logic [31:0] link_err,
  input  logic [31:0] tiles,
  input  logic [31:0] now
);
  assign poll_rd = reg_re && (reg_addr == R_POLL_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reset_req  <= 1'b0;
      dma_mode   <= 1'b0;
      dma_base   <= '0;
      dma_mask   <= 32'h0000_03FF;
      dma_rdptr  <= '0;
      reg_rdata  <= '0;
      reg_rvalid <= 1'b0;
    end else begin
      reset_req  <= reg_we && (reg_addr == R_CTRL) && reg_wdata[0];
      reg_rvalid <= reg_re;
      if (reg_we) begin
        unique case (reg_addr)
          R_CTRL:      dma_mode  <= reg_wdata[1];
          R_DMA_BASE:  dma_base  <= reg_wdata;
          R_DMA_MASK:  dma_mask  <= reg_wdata;
          R_DMA_RDPTR: dma_rdptr <= reg_wdata;
          default: ;
        endcase
      end
      if (reg_re) begin
        unique case (reg_addr)
          R_CTRL:      reg_rdata <= {30'd0, dma_mode, 1'b0};
          R_STATUS:    reg_rdata <= status;
          R_DMA_BASE:  reg_rdata <= dma_base;
          R_DMA_MASK:  reg_rdata <= dma_mask;
          R_DMA_RDPTR: reg_rdata <= dma_rdptr;
          R_DMA_WRPTR: reg_rdata <= dma_wrptr;
          R_POLL_DATA: reg_rdata <= poll_word;
          R_POLL_CNT:  reg_rdata <= poll_count;
          R_HITS:      reg_rdata <= hits;
          R_DROPS:     reg_rdata <= drops;
          R_LINK_ERR:  reg_rdata <= link_err;
          R_TILES:     reg_rdata <= tiles;
          R_TIME:      reg_rdata <= now;
          default:     reg_rdata <= 32'hDEAD_BEEF;
        endcase
      end
    end
  end

  a_no_rw: assert property (@(posedge clk) disable iff (!rst_n) !(reg_we && reg_re));
endmodule
