// reset_distributor: the common synchronous reset of all counters.
//
// All time-stamp counters in the system (sensors, FPGA time base, tile TDC)
// must start together. The master FPGA creates the reset: on a request it
// drives its two reset outputs high for RESET_LEN clocks. reset_1 is looped
// back through the adapter card into the master's own reset input, reset_2
// goes to the slave's reset input, so both FPGAs receive the same pulse over
// equal paths. Every FPGA, master or slave, samples its reset input with two
// flip-flops and turns the rising edge into a one-clock sync_rst pulse that
// clears its counters and is forwarded to its sensors. A slave never drives
// its reset outputs.
// Interface: all in the 125 MHz clock domain; sync_rst follows the request by
// RESET path delay plus three clocks. Master creation, loopback and slave link
// are the paper's (with Fig. 2's reset_1/reset_2 names); pulse length and edge
// detection are this design's.
module reset_distributor #(
  parameter bit MASTER    = 1'b1,
  parameter int RESET_LEN = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic reset_req,
  input  logic reset_in,
  output logic reset_1,
  output logic reset_2,
  output logic sync_rst
);
  localparam int LW = $clog2(RESET_LEN + 1);
  logic [LW-1:0] len;
  logic [2:0]    s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      len      <= '0;
      reset_1  <= 1'b0;
      reset_2  <= 1'b0;
      s        <= '0;
      sync_rst <= 1'b0;
    end else begin
      if (MASTER && reset_req && len == '0) len <= LW'(RESET_LEN);
      else if (len != '0)                   len <= len - 1'b1;
      reset_1  <= MASTER && (len != '0);
      reset_2  <= MASTER && (len != '0);
      s        <= {s[1:0], reset_in};
      sync_rst <= s[1] && !s[2];
    end
  end
endmodule
