// dec_8b10b: combinational 10b/8b decoder (IBM 8b/10b line code).
//
// Input symbol bits are ordered abcdei fghj with 'a' (the first bit on the
// line) in bit 9. The 6-bit sub-block abcdei maps to EDCBA and the 4-bit
// sub-block fghj to HGF through the standard code tables; when the 6-bit
// sub-block is the K.28 pattern of positive disparity (110000) the 4-bit
// sub-block is complemented before the lookup, which makes one table serve
// every K.28.y symbol. K is set for K.28.y and for K.23.7, K.27.7, K.29.7
// and K.30.7. err flags a sub-block that is not in the tables. Running
// disparity is not tracked here, since it needs state across symbols; the
// FE-I4B receiver checks it next to this decoder.
module dec_8b10b (
  input  logic [9:0] sym,
  output logic [7:0] data,
  output logic       k,
  output logic       err
);
  logic [5:0] s6;
  logic [3:0] s4, s4c;
  logic [4:0] d5;
  logic [2:0] d3;
  logic       e6, e4, k28;

  assign s6  = sym[9:4];
  assign s4  = sym[3:0];
  assign k28 = (s6 == 6'b001111) || (s6 == 6'b110000);
  assign s4c = (s6 == 6'b110000) ? ~s4 : s4;

  always_comb begin
    e6 = 1'b0;
    unique case (s6)
      6'b100111, 6'b011000: d5 = 5'd0;
      6'b011101, 6'b100010: d5 = 5'd1;
      6'b101101, 6'b010010: d5 = 5'd2;
      6'b110001:            d5 = 5'd3;
      6'b110101, 6'b001010: d5 = 5'd4;
      6'b101001:            d5 = 5'd5;
      6'b011001:            d5 = 5'd6;
      6'b111000, 6'b000111: d5 = 5'd7;
      6'b111001, 6'b000110: d5 = 5'd8;
      6'b100101:            d5 = 5'd9;
      6'b010101:            d5 = 5'd10;
      6'b110100:            d5 = 5'd11;
      6'b001101:            d5 = 5'd12;
      6'b101100:            d5 = 5'd13;
      6'b011100:            d5 = 5'd14;
      6'b010111, 6'b101000: d5 = 5'd15;
      6'b011011, 6'b100100: d5 = 5'd16;
      6'b100011:            d5 = 5'd17;
      6'b010011:            d5 = 5'd18;
      6'b110010:            d5 = 5'd19;
      6'b001011:            d5 = 5'd20;
      6'b101010:            d5 = 5'd21;
      6'b011010:            d5 = 5'd22;
      6'b111010, 6'b000101: d5 = 5'd23;
      6'b110011, 6'b001100: d5 = 5'd24;
      6'b100110:            d5 = 5'd25;
      6'b010110:            d5 = 5'd26;
      6'b110110, 6'b001001: d5 = 5'd27;
      6'b001110:            d5 = 5'd28;
      6'b001111, 6'b110000: d5 = 5'd28;
      6'b101110, 6'b010001: d5 = 5'd29;
      6'b011110, 6'b100001: d5 = 5'd30;
      6'b101011, 6'b010100: d5 = 5'd31;
      default: begin d5 = 5'd0; e6 = 1'b1; end
    endcase
  end

  always_comb begin
    e4 = 1'b0;
    unique case (s4c)
      4'b1011, 4'b0100: d3 = 3'd0;
      4'b1001:          d3 = 3'd1;
      4'b0101:          d3 = 3'd2;
      4'b1100, 4'b0011: d3 = 3'd3;
      4'b1101, 4'b0010: d3 = 3'd4;
      4'b1010:          d3 = 3'd5;
      4'b0110:          d3 = 3'd6;
      4'b1110, 4'b0001, 4'b0111, 4'b1000: d3 = 3'd7;
      default: begin d3 = 3'd0; e4 = 1'b1; end
    endcase
  end

  // K.x.7 with x in {23,27,29,30}: 6-bit code followed by the "alternate" 4-bit
  // code of the opposite sign to the data use of D.x.A7.
  logic kx7;
  always_comb begin
    unique case (s6)
      6'b111010, 6'b110110, 6'b101110, 6'b011110: kx7 = (s4 == 4'b1000);
      6'b000101, 6'b001001, 6'b010001, 6'b100001: kx7 = (s4 == 4'b0111);
      default:                                    kx7 = 1'b0;
    endcase
  end

  assign data = {d3, d5};
  assign k    = k28 || kx7;
  assign err  = e6 || e4;
endmodule
