// ts_counter: time-stamp counter of the telescope.
//
// The sensors stamp hits with an 8-bit time stamp running at 62.5 MHz, half of
// the common 125 MHz clock. This counter divides the clock by PRESCALE and
// counts up on every tick; the low 8 bits are the sensor time stamp and the
// upper bits extend it so that the readout can number its blocks. The common
// synchronous reset clears both prescaler and count, so every sensor and FPGA
// that sees the reset in the same cycle counts in step afterwards.
// Interface: tick is high in the cycle the count changes; ts is registered.
// The 62.5 MHz rate and the 8-bit stamp follow the paper; the 32-bit extension
// is this design's choice.
module ts_counter #(
  parameter int PRESCALE = 2,
  parameter int WIDTH    = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             sync_rst,
  output logic             tick,
  output logic [WIDTH-1:0] ts
);
  localparam int PW = (PRESCALE > 1) ? $clog2(PRESCALE) : 1;
  logic [PW-1:0] pre;

  assign tick = (pre == PW'(PRESCALE - 1)) && !sync_rst;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pre <= '0;
      ts  <= '0;
    end else if (sync_rst) begin
      pre <= '0;
      ts  <= '0;
    end else begin
      pre <= tick ? '0 : pre + 1'b1;
      if (tick) ts <= ts + 1'b1;
    end
  end
endmodule
