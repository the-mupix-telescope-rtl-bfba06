// dec_8b10b: 8b/10b decoder on the FPGA side of the sensor link.
//
// Inverts the standard 8b/10b code: the six-bit sub-block abcdei is looked up
// in both disparity forms to recover EDCBA, the four-bit sub-block fghj to
// recover HGF. The six-bit patterns 001111 and 110000 mark the K28.y control
// characters, whose four-bit sub-blocks follow the control-character table.
// Codes outside the tables raise err. Disparity errors are not checked.
// Interface: combinational; code[9] = a (first bit on the line).
// Decoding the link is from the paper; the tables are the standard code.
module dec_8b10b (
  input  logic [9:0] code,
  output logic [7:0] data,
  output logic       k,
  output logic       err
);
  function automatic logic [5:0] tab6(input logic [4:0] x);  // RD- form
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;
      5'd2:  return 6'b101101;  5'd3:  return 6'b110001;
      5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;
      5'd8:  return 6'b111001;  5'd9:  return 6'b100101;
      5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;
      5'd14: return 6'b011100;  5'd15: return 6'b010111;
      5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;
      5'd20: return 6'b001011;  5'd21: return 6'b101010;
      5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;
      5'd26: return 6'b010110;  5'd27: return 6'b110110;
      5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  function automatic logic balanced(input logic [5:0] v);
    int n = 0;
    for (int i = 0; i < 6; i++) n += int'(v[i]);
    return n == 3;
  endfunction

  logic [5:0] c6;
  logic [3:0] c4;
  logic [4:0] x;
  logic [2:0] y;
  logic       ok6, ok4;

  assign c6 = code[9:4];
  assign c4 = code[3:0];

  always_comb begin
    x   = '0;
    ok6 = 1'b0;
    k   = 1'b0;
    if (c6 == 6'b001111 || c6 == 6'b110000) begin
      x   = 5'd28;
      k   = 1'b1;
      ok6 = 1'b1;
    end else begin
      for (int i = 0; i < 32; i++) begin
        if (c6 == tab6(5'(i)) ||
            ((!balanced(tab6(5'(i))) || i == 7) && c6 == ~tab6(5'(i)))) begin
          x   = 5'(i);
          ok6 = 1'b1;
        end
      end
    end
    ok4 = 1'b1;
    case (c4)
      4'b1011, 4'b0100:                   y = 3'd0;
      4'b1001:                            y = 3'd1;
      4'b0101:                            y = 3'd2;
      4'b1100, 4'b0011:                   y = 3'd3;
      4'b1101, 4'b0010:                   y = 3'd4;
      4'b1010:                            y = 3'd5;
      4'b0110:                            y = 3'd6;
      4'b1110, 4'b0001, 4'b0111, 4'b1000: y = 3'd7;
      default: begin y = 3'd0; ok4 = 1'b0; end
    endcase
    // after 110000 the neutral control sub-blocks are inverted
    if (k && c6 == 6'b110000 && (y == 3'd1 || y == 3'd2 || y == 3'd5 || y == 3'd6))
      y = 3'd7 - y;
    data = {y, x};
    err  = !(ok6 && ok4);
  end
endmodule
