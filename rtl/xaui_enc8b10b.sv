// 8B/10B encoder for one byte (Widmer-Franaszek code, as used by XAUI).
// Combinational: the byte HGFEDCBA and the control flag k are split into a
// 5b/6b and a 3b/4b sub-block; each sub-block takes its RD- or RD+ form from
// the running disparity, which is passed in and out so that encoders can be
// chained for several code groups per clock. The output bit order is
// abcdei fghj with 'a' in bit 0, the first bit on the line (Fig. 3 of the
// source). Valid k codes are K28.0-K28.7, K23.7, K27.7, K29.7 and K30.7; any
// other byte with k = 1 is encoded as data and flagged on k_err.
// rd_in/rd_out: 0 = RD-, 1 = RD+.
module xaui_enc8b10b (
  input  logic [7:0] din,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] dout,
  output logic       rd_out,
  output logic       k_err
);
  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] b6;      // abcdei, RD- form
  logic [3:0] b4;      // fghj, RD- form
  logic       rd_mid;
  logic [5:0] o6;
  logic [3:0] o4;
  logic       k28, kx7, use_a7;
  logic [3:0] f4;      // fghj of K28.y, RD- form

  assign x = din[4:0];
  assign y = din[7:5];
  assign k28 = k && (x == 5'd28);
  assign kx7 = k && (y == 3'd7) && (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30);
  assign k_err = k && !k28 && !kx7;

  // 5b/6b table, RD- form, written as a..i with 'a' leftmost
  function automatic logic [5:0] tab6(input logic [4:0] v);
    case (v)
      5'd0: tab6 = 6'b100111;  5'd1: tab6 = 6'b011101;  5'd2: tab6 = 6'b101101;
      5'd3: tab6 = 6'b110001;  5'd4: tab6 = 6'b110101;  5'd5: tab6 = 6'b101001;
      5'd6: tab6 = 6'b011001;  5'd7: tab6 = 6'b111000;  5'd8: tab6 = 6'b111001;
      5'd9: tab6 = 6'b100101;  5'd10: tab6 = 6'b010101; 5'd11: tab6 = 6'b110100;
      5'd12: tab6 = 6'b001101; 5'd13: tab6 = 6'b101100; 5'd14: tab6 = 6'b011100;
      5'd15: tab6 = 6'b010111; 5'd16: tab6 = 6'b011011; 5'd17: tab6 = 6'b100011;
      5'd18: tab6 = 6'b010011; 5'd19: tab6 = 6'b110010; 5'd20: tab6 = 6'b001011;
      5'd21: tab6 = 6'b101010; 5'd22: tab6 = 6'b011010; 5'd23: tab6 = 6'b111010;
      5'd24: tab6 = 6'b110011; 5'd25: tab6 = 6'b100110; 5'd26: tab6 = 6'b010110;
      5'd27: tab6 = 6'b110110; 5'd28: tab6 = 6'b001110; 5'd29: tab6 = 6'b101110;
      5'd30: tab6 = 6'b011110; default: tab6 = 6'b101011;
    endcase
  endfunction

  function automatic int ones6(input logic [5:0] v);
    ones6 = int'(v[0]) + int'(v[1]) + int'(v[2]) + int'(v[3]) + int'(v[4]) + int'(v[5]);
  endfunction

  always_comb begin
    f4 = 4'b0000;
    // 5b/6b
    b6 = k28 ? 6'b001111 : tab6(x);
    if (ones6(b6) != 3) begin
      o6 = rd_in ? ~b6 : b6;           // unbalanced: RD- form has four ones
      rd_mid = ~rd_in;
    end else begin
      o6 = (x == 5'd7 && !k28 && rd_in) ? 6'b000111 : b6;
      rd_mid = rd_in;
    end
    // 3b/4b
    use_a7 = kx7 || (y == 3'd7 && !k28 &&
             ((!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
              ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14))));
    case (y)
      3'd0: b4 = 4'b1011;
      3'd1: b4 = 4'b1001;
      3'd2: b4 = 4'b0101;
      3'd3: b4 = 4'b1100;
      3'd4: b4 = 4'b1101;
      3'd5: b4 = 4'b1010;
      3'd6: b4 = 4'b0110;
      default: b4 = use_a7 ? 4'b0111 : 4'b1110;
    endcase
    if (y == 3'd0 || y == 3'd4 || y == 3'd7) begin
      o4 = rd_mid ? ~b4 : b4;
      rd_out = ~rd_mid;
    end else if (y == 3'd3) begin
      o4 = rd_mid ? ~b4 : b4;
      rd_out = rd_mid;
    end else begin
      // balanced and the same in both forms, except inside K28 where the
      // whole code group is complemented in RD+
      o4 = (k28 && rd_in) ? ~b4 : b4;
      rd_out = rd_mid;
    end
    if (k28) begin
      // K28.y: RD- form is 001111 followed by the RD+ form of D.x.y
      // (balanced 4b taken as is); RD+ form is the full complement
      case (y)
        3'd0: f4 = 4'b0100;  3'd1: f4 = 4'b1001;  3'd2: f4 = 4'b0101;
        3'd3: f4 = 4'b0011;  3'd4: f4 = 4'b0010;  3'd5: f4 = 4'b1010;
        3'd6: f4 = 4'b0110;  default: f4 = 4'b1000;
      endcase
      o6 = rd_in ? 6'b110000 : 6'b001111;
      o4 = rd_in ? ~f4 : f4;
      rd_out = (y == 3'd0 || y == 3'd4 || y == 3'd7) ? rd_in : ~rd_in;
    end
    // bit 0 = a
    dout = {o4[0], o4[1], o4[2], o4[3], o6[0], o6[1], o6[2], o6[3], o6[4], o6[5]};
  end
endmodule
