// dma_engine: writes the readout stream into a ring buffer in host memory.
//
// In DMA mode the output words go straight into the PC's memory instead of
// waiting to be polled. The host sets up a ring buffer of MASK+1 words (a power
// of two) at byte address BASE and tells the engine how far it has read
// (rdptr, in words). The engine keeps its own write pointer (wrptr, in words,
// free running) and issues one 32-bit memory write per word at
// BASE + 4*(wrptr & MASK), stalling while the ring holds MASK+1 unread words.
// The PCIe endpoint that turns these writes into bus transactions is outside
// this module.
// Interface: valid/ready stream in; write request out (wr_valid held with
// address and data until wr_ready). enable low stops new words.
// DMA to the PC is the paper's; the ring-buffer protocol is this design's.
module dma_engine #(
  parameter int ADDR_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              enable,
  input  logic [ADDR_W-1:0] base,
  input  logic [31:0]       mask,
  input  logic [31:0]       rdptr,
  output logic [31:0]       wrptr,
  input  logic [31:0]       in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output logic              wr_valid,
  output logic [ADDR_W-1:0] wr_addr,
  output logic [31:0]       wr_data,
  input  logic              wr_ready
);
  logic [31:0] used;
  logic        ring_full;

  assign used      = wrptr - rdptr;
  assign ring_full = (used > mask);
  assign in_ready  = enable && !ring_full && (!wr_valid || wr_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wrptr    <= '0;
      wr_valid <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
    end else begin
      if (wr_valid && wr_ready) wr_valid <= 1'b0;
      if (in_valid && in_ready) begin
        wr_valid <= 1'b1;
        wr_addr  <= base + ADDR_W'({wrptr & mask, 2'b00});
        wr_data  <= in_data;
        wrptr    <= wrptr + 1'b1;
      end
    end
  end

  // a held request must not change until taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (wr_valid && !wr_ready) |=> (wr_valid && $stable(wr_addr) && $stable(wr_data));
  endproperty
  a_hold: assert property (p_hold);
endmodule
