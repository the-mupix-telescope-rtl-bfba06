// hit_merger: merges the hit streams of the four sensor links.
//
// Each link writes its labelled hits into a small FIFO; a round-robin arbiter
// forwards one hit per clock from the non-empty FIFOs to the time sorter. A
// link sends at most one hit per four clocks, so four links together never
// exceed the one hit per clock the merger forwards; the FIFOs only absorb
// simultaneous arrivals. A hit arriving at a full FIFO is dropped (drop pulse).
// Interface: out_valid is a one-cycle strobe with out_hit; there is no back
// pressure. Merging the four streams is from the paper; round-robin order and
// FIFO depth are this design's choice.
module hit_merger
  import mupix_pkg::*;
#(
  parameter int N_LINKS    = 4,
  parameter int FIFO_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clr,
  input  hit_t [N_LINKS-1:0] in_hit,
  input  logic [N_LINKS-1:0] in_valid,
  output hit_t               out_hit,
  output logic               out_valid,
  output logic               drop
);
  localparam int LW = (N_LINKS > 1) ? $clog2(N_LINKS) : 1;
  localparam int HW = $bits(hit_t);

  logic [N_LINKS-1:0]         empty, full, rd;
  logic [N_LINKS-1:0][HW-1:0] head;
  logic [LW-1:0]              last, pick;
  logic                       any;

  for (genvar i = 0; i < N_LINKS; i++) begin : g_fifo
    sync_fifo #(.WIDTH(HW), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .clr,
      .wr_en(in_valid[i]), .wdata(in_hit[i]),
      .rd_en(rd[i]), .rdata(head[i]),
      .full(full[i]), .empty(empty[i]), .level()
    );
  end

  // round robin: first non-empty FIFO after the last one served
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int j = N_LINKS; j >= 1; j--) begin
      int idx;
      idx = (int'(last) + j) % N_LINKS;
      if (!empty[idx]) begin
        any  = 1'b1;
        pick = LW'(idx);
      end
    end
    rd = '0;
    if (any) rd[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= LW'(N_LINKS - 1);
      out_hit   <= '0;
      out_valid <= 1'b0;
      drop      <= 1'b0;
    end else begin
      out_valid <= any;
      if (any) begin
        out_hit <= hit_t'(head[pick]);
        last    <= pick;
      end
      drop <= |(in_valid & full);
    end
  end
endmodule
