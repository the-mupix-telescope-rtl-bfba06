// polling_readout: serves the readout stream to CPU register reads.
//
// In polling mode the PC fetches the data itself, one register read per word.
// This module keeps the next word of the output stream in a holding register.
// A read (rd pulse) returns that word on word and frees the register, which
// refills from the stream in the next clock. A read while the register is
// empty returns 0, which is no valid word type, so the software can tell an
// empty buffer from data. served counts the words delivered. clr empties the
// holding register (used at the start of a run).
// Interface: valid/ready stream in; word is combinational and valid in the
// cycle of rd. Polling as a readout mode is the paper's; the empty marker and
// counter are this design's.
module polling_readout (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic        enable,
  input  logic [31:0] in_data,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic        rd,
  output logic [31:0] word,
  output logic [31:0] served
);
  logic [31:0] head;
  logic        head_valid;

  assign in_ready = enable && !head_valid;
  assign word     = head_valid ? head : 32'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      head       <= '0;
      head_valid <= 1'b0;
      served     <= '0;
    end else begin
      if (rd && head_valid) begin
        head_valid <= 1'b0;
        served     <= served + 1'b1;
      end
      if (clr) begin
        head_valid <= 1'b0;
      end else if (in_valid && in_ready) begin
        head       <= in_data;
        head_valid <= 1'b1;
      end
    end
  end
endmodule
