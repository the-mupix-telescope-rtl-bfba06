// async_fifo: dual-clock FIFO for the tile time stamps.
//
// Tile edges are time stamped in the 500 MHz domain and read in the 125 MHz
// domain. Write and read pointers are kept in Gray code and passed to the other
// side through two-stage synchronizers, so full and empty are pessimistic but
// never wrong. The head entry is visible on rdata while empty is low.
// Interface: wr_en ignored when full, rd_en ignored when empty. DEPTH must be
// a power of two. The clock crossing itself is this design's choice.
module async_fifo #(
  parameter int WIDTH = 33,
  parameter int DEPTH = 8
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2, wgray_r1, wgray_r2;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_n = wbin + (AW+1)'(wr_en && !full);
  assign rbin_n = rbin + (AW+1)'(rd_en && !empty);
  assign full   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign empty  = (rgray == wgray_r2);
  assign rdata  = mem[rbin[AW-1:0]];

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      wbin <= wbin_n; wgray <= b2g(wbin_n);
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      rbin <= rbin_n; rgray <= b2g(rbin_n);
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
    end
  end
endmodule
