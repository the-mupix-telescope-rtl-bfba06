// sync_fifo: single-clock first-in first-out buffer.
//
// A circular buffer of DEPTH entries (a power of two) with read and write
// pointers one bit wider than the address. The head entry is visible on rdata
// whenever empty is low (first-word fall-through); rd_en pops it. Writing when
// full or reading when empty is ignored. level counts the stored entries.
// Used for the per-link hit buffers and the output buffer of the readout;
// their depths are this design's choice.
module sync_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   wr_en,
  input  logic [WIDTH-1:0]       wdata,
  input  logic                   rd_en,
  output logic [WIDTH-1:0]       rdata,
  output logic                   full,
  output logic                   empty,
  output logic [$clog2(DEPTH):0] level
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0]      wp, rp;
  logic             do_wr, do_rd;

  assign level = wp - rp;
  assign full  = (level == (AW+1)'(DEPTH));
  assign empty = (wp == rp);
  assign rdata = mem[rp[AW-1:0]];
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp[AW-1:0]] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else if (clr) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
    end
  end
endmodule
