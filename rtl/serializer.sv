// serializer: parallel-to-serial converter of the sensor link.
//
// The sensor sends one 10-bit 8b/10b symbol per 125 MHz cycle as a
// 1.25 Gbit/s serial stream. The bit clock runs exactly ten times faster than
// the word clock and is phase locked to it (both come from the same PLL). The
// word-clock side captures each symbol in a holding register and flips a
// toggle bit; the bit-clock side sees the toggle through a two-stage
// synchronizer two to three bit periods later, loads the symbol into a shift
// register and shifts it out MSB (bit a) first over the next ten bit periods.
// Because the toggle flips once per word, the loads fall every ten bit clocks
// and always well inside the time the holding register is stable.
// Interface: word is sampled at each word_clk edge; sout changes on bitclk.
// Latency about 2 word clocks. The 1.25 Gbit/s rate and 10-bit symbols follow
// the paper; the toggle-based phasing is this design's choice.
module serializer #(
  parameter int W = 10
) (
  input  logic         word_clk,
  input  logic         bitclk,
  input  logic         rst_n,
  input  logic [W-1:0] word,
  output logic         sout
);
  logic [W-1:0] hold;
  logic         tog;
  logic [2:0]   tog_s;  // two sync stages and one for edge detection
  logic [W-1:0] sr;

  always_ff @(posedge word_clk or negedge rst_n) begin
    if (!rst_n) begin
      hold <= '0;
      tog  <= 1'b0;
    end else begin
      hold <= word;
      tog  <= ~tog;
    end
  end

  always_ff @(posedge bitclk or negedge rst_n) begin
    if (!rst_n) begin
      tog_s <= '0;
      sr    <= '0;
    end else begin
      tog_s <= {tog_s[1:0], tog};
      if (tog_s[2] != tog_s[1]) sr <= hold;
      else                      sr <= {sr[W-2:0], 1'b0};
    end
  end

  assign sout = sr[W-1];
endmodule
