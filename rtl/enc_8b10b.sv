// enc_8b10b: 8b/10b encoder of the sensor link.
//
// The sensor sends its hit frames 8b/10b encoded. This encoder implements the
// standard code: the low five bits (EDCBA) map to a six-bit sub-block abcdei,
// the high three bits (HGF) to a four-bit sub-block fghj, and each sub-block is
// chosen from two complementary forms by the running disparity so that the line
// stays DC balanced. Control characters are supported for K28.y only, which is
// all the link frame uses (K28.0 header, K28.5 comma).
// Interface: one symbol per clock; code is registered, code[9] = a is sent
// first. Running disparity starts negative after reset.
// That the link is 8b/10b encoded is from the paper; the tables are the
// standard code, which the paper does not print.
module enc_8b10b (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] data,
  input  logic       k,
  output logic [9:0] code
);
  logic rd;  // running disparity, 1 = positive

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

  function automatic logic [3:0] tab4(input logic [2:0] y, input logic alt7);  // RD- form
    case (y)
      3'd0: return 4'b1011;  3'd1: return 4'b1001;
      3'd2: return 4'b0101;  3'd3: return 4'b1100;
      3'd4: return 4'b1101;  3'd5: return 4'b1010;
      3'd6: return 4'b0110;  default: return alt7 ? 4'b0111 : 4'b1110;
    endcase
  endfunction

  function automatic int ones(input logic [5:0] v);
    int n = 0;
    for (int i = 0; i < 6; i++) n += int'(v[i]);
    return n;
  endfunction

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6, b6;
  logic [3:0] c4, b4;
  logic       rd6, rd_next, alt7;

  assign x = data[4:0];
  assign y = data[7:5];

  always_comb begin
    // 6b sub-block
    b6 = k ? 6'b001111 : tab6(x);
    if (k) c6 = rd ? 6'b110000 : 6'b001111;
    else   c6 = (rd && (ones(b6) != 3 || x == 5'd7)) ? ~b6 : b6;
    rd6 = (ones(c6) == 3) ? rd : ~rd;
    // 4b sub-block
    alt7 = k || (!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20))
             || (rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14));
    b4 = tab4(y, alt7);
    c4 = (rd6 && (ones({2'b00, b4}) != 2 || y == 3'd3)) ? ~b4 : b4;
    if (k && !rd6 && (y == 3'd1 || y == 3'd2 || y == 3'd5 || y == 3'd6)) c4 = ~c4;
    rd_next = (ones({2'b00, c4}) == 2) ? rd6 : ~rd6;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd   <= 1'b0;
      code <= 10'b0011111010;  // K28.5
    end else begin
      rd   <= rd_next;
      code <= {c6, c4};
    end
  end
endmodule
