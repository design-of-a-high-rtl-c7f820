// 8B/10B decoder for one code group (bit 0 = 'a', first bit on the line).
// Combinational. The 6-bit and 4-bit sub-blocks are decoded independently,
// accepting both their RD- and RD+ forms, so no running disparity is kept:
// a code group that is not in either form of the code table is flagged on
// err, but a disparity error between otherwise valid groups is not
// detected (this design's simplification). k is set for K28.y and for
// K23.7, K27.7, K29.7 and K30.7.
module xaui_dec8b10b (
  input  logic [9:0] din,
  output logic [7:0] dout,
  output logic       k,
  output logic       err
);
  logic [5:0] b6;   // abcdei, a leftmost
  logic [3:0] b4;   // fghj, f leftmost
  logic [4:0] x;
  logic [2:0] y;
  logic       e6, e4, k28, a7;

  assign b6 = {din[0], din[1], din[2], din[3], din[4], din[5]};
  assign b4 = {din[6], din[7], din[8], din[9]};

  always_comb begin
    e6 = 1'b0;
    k28 = 1'b0;
    case (b6)
      6'b100111, 6'b011000: x = 5'd0;
      6'b011101, 6'b100010: x = 5'd1;
      6'b101101, 6'b010010: x = 5'd2;
      6'b110001:            x = 5'd3;
      6'b110101, 6'b001010: x = 5'd4;
      6'b101001:            x = 5'd5;
      6'b011001:            x = 5'd6;
      6'b111000, 6'b000111: x = 5'd7;
      6'b111001, 6'b000110: x = 5'd8;
      6'b100101:            x = 5'd9;
      6'b010101:            x = 5'd10;
      6'b110100:            x = 5'd11;
      6'b001101:            x = 5'd12;
      6'b101100:            x = 5'd13;
      6'b011100:            x = 5'd14;
      6'b010111, 6'b101000: x = 5'd15;
      6'b011011, 6'b100100: x = 5'd16;
      6'b100011:            x = 5'd17;
      6'b010011:            x = 5'd18;
      6'b110010:            x = 5'd19;
      6'b001011:            x = 5'd20;
      6'b101010:            x = 5'd21;
      6'b011010:            x = 5'd22;
      6'b111010, 6'b000101: x = 5'd23;
      6'b110011, 6'b001100: x = 5'd24;
      6'b100110:            x = 5'd25;
      6'b010110:            x = 5'd26;
      6'b110110, 6'b001001: x = 5'd27;
      6'b001110:            x = 5'd28;
      6'b101110, 6'b010001: x = 5'd29;
      6'b011110, 6'b100001: x = 5'd30;
      6'b101011, 6'b010100: x = 5'd31;
      6'b001111, 6'b110000: begin x = 5'd28; k28 = 1'b1; end
      default: begin x = 5'd0; e6 = 1'b1; end
    endcase

    e4 = 1'b0;
    a7 = 1'b0;
    case (b4)
      4'b1011, 4'b0100: y = 3'd0;
      4'b1001:          y = 3'd1;
      4'b0101:          y = 3'd2;
      4'b1100, 4'b0011: y = 3'd3;
      4'b1101, 4'b0010: y = 3'd4;
      4'b1010:          y = 3'd5;
      4'b0110:          y = 3'd6;
      4'b1110, 4'b0001: y = 3'd7;
      4'b0111, 4'b1000: begin y = 3'd7; a7 = 1'b1; end
      default: begin y = 3'd0; e4 = 1'b1; end
    endcase

    // K28.y: the RD- code is 001111 + fghj and the RD+ code its complement,
    // so undo the complement and decode the RD- fghj.
    if (k28) begin
      e4 = 1'b0;
      case (b6 == 6'b110000 ? ~b4 : b4)
        4'b0100: y = 3'd0;  4'b1001: y = 3'd1;  4'b0101: y = 3'd2;
        4'b0011: y = 3'd3;  4'b0010: y = 3'd4;  4'b1010: y = 3'd5;
        4'b0110: y = 3'd6;  4'b1000: y = 3'd7;
        default: begin y = 3'd0; e4 = 1'b1; end
      endcase
      a7 = 1'b0;
    end

    k   = k28 || (a7 && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30));
    err = e6 || e4 || (a7 && !k && !(x == 5'd17 || x == 5'd18 || x == 5'd20 ||
                                     x == 5'd11 || x == 5'd13 || x == 5'd14));
    dout = {y, x};
  end
endmodule
