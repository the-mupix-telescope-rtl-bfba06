// clock_switch: selects the reference clock of the FPGA PLL.
//
// The FPGA either runs from the common external clock, which keeps all
// FPGAs and sensors synchronous, or from its own on-board oscillator. This is a
// glitch-free clock multiplexer: each clock has an enable flip-flop pair
// clocked on its falling edge, and a clock is enabled only after the other
// one's enable has dropped, so the output never carries a shortened pulse.
// Interface: sel = 1 selects clk_ext. After a change of sel the output is low
// for a few cycles of both clocks, then follows the new clock.
// The switch is the paper's; the glitch-free structure is this design's.
module clock_switch (
  input  logic clk_int,
  input  logic clk_ext,
  input  logic rst_n,
  input  logic sel,
  output logic clk_out
);
  logic int_s1, int_en, ext_s1, ext_en;

  always_ff @(negedge clk_int or negedge rst_n) begin
    if (!rst_n) begin
      int_s1 <= 1'b0;
      int_en <= 1'b0;
    end else begin
      int_s1 <= !sel && !ext_en;
      int_en <= int_s1;
    end
  end

  always_ff @(negedge clk_ext or negedge rst_n) begin
    if (!rst_n) begin
      ext_s1 <= 1'b0;
      ext_en <= 1'b0;
    end else begin
      ext_s1 <= sel && !int_en;
      ext_en <= ext_s1;
    end
  end

  assign clk_out = (clk_int && int_en) || (clk_ext && ext_en);
endmodule
