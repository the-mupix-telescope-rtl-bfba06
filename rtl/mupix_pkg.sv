// mupix_pkg: constants and types shared by the MuPix7 sensor logic and the
// FPGA readout firmware of the telescope.
//
// Sensor geometry (32 x 40 pixels), the 8-bit time stamp and the block size of
// 32 time stamps follow the paper. The link frame (K28.0 header, column, row,
// time stamp; K28.5 when idle) and the 32-bit output word layout are this
// design's own choice, since the paper gives neither.
//
// Output words (32 bit), type in bits 31:28:
//   PIX_HDR  : [26:0] block number (time stamp >> 5)
//   PIX_HIT  : [21:19] sensor label, [18:14] column, [13:8] row, [7:0] time stamp
//   PIX_TRL  : [27] overflow seen in block, [15:0] hits in block
//   TILE_HDR : [23:0] tile block number (500 MHz count >> 8)
//   TILE_HIT : [27:24] tile number, [23:0] low 24 bits of the 500 MHz count
//   TILE_TRL : [15:0] tile hits in block
// The value 0 is never a valid word (type 0 is unused).
package mupix_pkg;

  localparam int N_COLS           = 32;
  localparam int N_ROWS           = 40;
  localparam int N_PIX            = N_COLS * N_ROWS;
  localparam int COL_BITS         = 5;
  localparam int ROW_BITS         = 6;
  localparam int TS_BITS          = 8;
  localparam int TS_PER_BLOCK     = 32;
  localparam int BLOCK_SHIFT      = 5;   // log2(TS_PER_BLOCK)
  localparam int SENSORS_PER_FPGA = 4;
  localparam int LABEL_BITS       = 3;   // {FPGA id, link number}

  // 8b/10b control characters used on the sensor link (K28.y: data = {y, 5'd28})
  localparam logic [7:0] K28_0 = 8'h1C;  // hit header
  localparam logic [7:0] K28_5 = 8'hBC;  // idle / comma
  // K28.5 symbols in both running disparities, bit 9 = a (sent first)
  localparam logic [9:0] COMMA_NEG = 10'b0011111010;
  localparam logic [9:0] COMMA_POS = 10'b1100000101;

  typedef struct packed {
    logic [LABEL_BITS-1:0] label;
    logic [COL_BITS-1:0]   col;
    logic [ROW_BITS-1:0]   row;
    logic [TS_BITS-1:0]    ts;
  } hit_t;  // 22 bits

  typedef enum logic [3:0] {
    W_NONE     = 4'h0,
    W_PIX_HDR  = 4'h1,
    W_PIX_HIT  = 4'h2,
    W_PIX_TRL  = 4'h3,
    W_TILE_HDR = 4'h5,
    W_TILE_HIT = 4'h6,
    W_TILE_TRL = 4'h7
  } word_type_e;

  // Register map of the control register file (word addresses)
  localparam logic [5:0] R_CTRL      = 6'd0;  // [0] reset request (self clearing), [1] DMA mode
  localparam logic [5:0] R_STATUS    = 6'd1;  // [3:0] links locked, [8] master
  localparam logic [5:0] R_DMA_BASE  = 6'd2;  // ring buffer byte base address
  localparam logic [5:0] R_DMA_MASK  = 6'd3;  // ring size in words minus one (2^n - 1)
  localparam logic [5:0] R_DMA_RDPTR = 6'd4;  // host read pointer (words)
  localparam logic [5:0] R_DMA_WRPTR = 6'd5;  // FPGA write pointer (words, read only)
  localparam logic [5:0] R_POLL_DATA = 6'd6;  // next output word, read pops it
  localparam logic [5:0] R_POLL_CNT  = 6'd7;  // words served by polling
  localparam logic [5:0] R_HITS      = 6'd8;  // hits received from the links
  localparam logic [5:0] R_DROPS     = 6'd9;  // hits dropped (merger or sorter)
  localparam logic [5:0] R_LINK_ERR  = 6'd10; // broken link frames
  localparam logic [5:0] R_TILES     = 6'd11; // tile hits
  localparam logic [5:0] R_TIME      = 6'd12; // current extended time stamp

  function automatic logic [31:0] pix_hit_word(hit_t h);
    return {W_PIX_HIT, 6'd0, h};
  endfunction

endpackage
