// mupix7_digital: the digital part of one MuPix7 sensor.
//
// Hits from the pixel matrix (comparator outputs, one line per pixel) are
// latched with the current 8-bit time stamp in the periphery cells
// (hit_buffer). The priority readout state machine (readout_fsm) drains the
// cells one hit per four clocks into an 8b/10b encoder (enc_8b10b), whose
// symbols leave on the 1.25 Gbit/s serial link (serializer). The time stamp
// runs at 62.5 MHz (ts_counter) and is cleared by the common synchronous reset
// that the FPGA forwards to its sensors.
// Interface: clk is the 125 MHz sensor clock from the FPGA, bitclk the 10x bit
// clock; hit_in is sampled each clk; sout is the serial output.
// The chain of cells, time stamp, priority readout, 8b/10b and serial link is
// the paper's; the frame format and the reset connection are this design's.
module mupix7_digital
  import mupix_pkg::*;
#(
  parameter int N_COLS = 32,
  parameter int N_ROWS = 40
) (
  input  logic                     clk,
  input  logic                     bitclk,
  input  logic                     rst_n,
  input  logic                     sync_rst,
  input  logic [N_COLS*N_ROWS-1:0] hit_in,
  output logic                     sout
);
  localparam int N = N_COLS * N_ROWS;

  logic [TS_BITS-1:0]          ts;
  logic                        tick;  // unused: the cells sample ts every clock
  logic [N-1:0]                full, clear;
  logic [N-1:0][TS_BITS-1:0]   cell_ts;
  logic [7:0]                  tx_data;
  logic                        tx_k;
  logic [9:0]                  code;

  ts_counter #(.PRESCALE(2), .WIDTH(TS_BITS)) u_ts (
    .clk, .rst_n, .sync_rst, .tick, .ts
  );

  hit_buffer #(.N_COLS(N_COLS), .N_ROWS(N_ROWS), .TS_BITS(TS_BITS)) u_cells (
    .clk, .rst_n, .hit_in, .ts(ts), .clear, .full, .cell_ts
  );

  readout_fsm #(.N_COLS(N_COLS), .N_ROWS(N_ROWS)) u_fsm (
    .clk, .rst_n, .full, .cell_ts, .clear, .tx_data, .tx_k
  );

  enc_8b10b u_enc (
    .clk, .rst_n, .data(tx_data), .k(tx_k), .code
  );

  serializer #(.W(10)) u_ser (
    .word_clk(clk), .bitclk, .rst_n, .word(code), .sout
  );
endmodule
