// block_arbiter: interleaves the pixel and tile block streams.
//
// Both the time sorter and the tile block builder produce complete blocks
// (header ... trailer). The arbiter grants the output to one of them for a
// whole block and releases it only after the word marked last has been
// accepted, so blocks never interleave word by word. When both wait, the
// source that was not served last goes next (alternating). A fixed priority
// would starve the tiles: the time sorter has a block waiting nearly always,
// since a pixel block spans 64 clock cycles of wall time.
// Interface: valid/ready streams with a last flag; the output is the granted
// input, combinationally. The alternating order is this design's; the paper
// only says both kinds of block are sent to the PC.
module block_arbiter (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] a_data,
  input  logic        a_valid,
  input  logic        a_last,
  output logic        a_ready,
  input  logic [31:0] b_data,
  input  logic        b_valid,
  input  logic        b_last,
  output logic        b_ready,
  output logic [31:0] out_data,
  output logic        out_valid,
  input  logic        out_ready
);
  typedef enum logic [1:0] {G_NONE, G_A, G_B} grant_e;
  grant_e grant, sel;
  logic   last_b;   // the last block served came from b

  always_comb begin
    sel = grant;
    if (grant == G_NONE) begin
      if (a_valid && b_valid) sel = last_b ? G_A : G_B;
      else                    sel = a_valid ? G_A : (b_valid ? G_B : G_NONE);
    end
    a_ready   = (sel == G_A) && out_ready;
    b_ready   = (sel == G_B) && out_ready;
    out_valid = (sel == G_A) ? a_valid : ((sel == G_B) ? b_valid : 1'b0);
    out_data  = (sel == G_B) ? b_data : a_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grant  <= G_NONE;
      last_b <= 1'b1;
    end else begin
      if (sel != G_NONE) last_b <= (sel == G_B);
      if (sel == G_A && a_valid && out_ready) grant <= a_last ? G_NONE : G_A;
      else if (sel == G_B && b_valid && out_ready) grant <= b_last ? G_NONE : G_B;
      else grant <= sel;
    end
  end
endmodule
