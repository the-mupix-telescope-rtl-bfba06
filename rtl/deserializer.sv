// deserializer: serial-to-parallel converter with comma alignment, FPGA side.
//
// The FPGA samples the 1.25 Gbit/s sensor stream with the common bit clock
// (the sensor clock is distributed by the FPGA, so no clock recovery is
// modelled). Bits enter a 20-bit shift register. Once per word, at a point
// phased to the 125 MHz word clock in the same way as in the serializer, the
// ten possible 10-bit windows are searched for the K28.5 comma (either
// disparity). When the comma is seen at the same offset LOCK_COUNT times in a
// row that offset is taken; from then on the window at that offset is the
// received symbol. A comma seen repeatedly at another offset re-aligns.
// Interface: word and locked are registered in the word_clk domain and change
// once per word clock. Comma alignment is this design's choice; the paper says
// only that the serial data are decoded online.
module deserializer
  import mupix_pkg::*;
#(
  parameter int W          = 10,
  parameter int LOCK_COUNT = 4
) (
  input  logic         word_clk,
  input  logic         bitclk,
  input  logic         rst_n,
  input  logic         sin,
  output logic [W-1:0] word,
  output logic         locked
);
  localparam int OW = $clog2(W);

  logic             tog;
  logic [2:0]       tog_s;
  logic [2*W-1:0]   sr;
  logic [OW-1:0]    off, cand;
  logic [2:0]       cnt;
  logic             lock_b;
  logic [W-1:0]     wreg;
  logic             hit;
  logic [OW-1:0]    hit_off;
  logic             boundary;

  always_ff @(posedge word_clk or negedge rst_n) begin
    if (!rst_n) tog <= 1'b0;
    else        tog <= ~tog;
  end

  // comma search over all offsets, lowest offset wins
  always_comb begin
    hit     = 1'b0;
    hit_off = '0;
    for (int o = W - 1; o >= 0; o--) begin
      if (sr[o +: W] == COMMA_NEG || sr[o +: W] == COMMA_POS) begin
        hit     = 1'b1;
        hit_off = OW'(o);
      end
    end
  end

  assign boundary = (tog_s[2] != tog_s[1]);

  always_ff @(posedge bitclk or negedge rst_n) begin
    if (!rst_n) begin
      tog_s  <= '0;
      sr     <= '0;
      off    <= '0;
      cand   <= '0;
      cnt    <= '0;
      lock_b <= 1'b0;
      wreg   <= '0;
    end else begin
      tog_s <= {tog_s[1:0], tog};
      sr    <= {sr[2*W-2:0], sin};
      if (boundary) begin
        wreg <= sr[5'(off) +: W];
        if (hit) begin
          if (hit_off == cand) begin
            if (cnt < 3'(LOCK_COUNT)) cnt <= cnt + 1'b1;
            if (cnt + 1'b1 >= 3'(LOCK_COUNT)) begin
              off    <= hit_off;
              lock_b <= 1'b1;
              wreg   <= sr[5'(hit_off) +: W];
            end
          end else begin
            cand <= hit_off;
            cnt  <= 3'd1;
          end
        end
      end
    end
  end

  always_ff @(posedge word_clk or negedge rst_n) begin
    if (!rst_n) begin
      word   <= '0;
      locked <= 1'b0;
    end else begin
      word   <= wreg;
      locked <= lock_b;
    end
  end
endmodule
