// Self-checking test of the 8B/10B decoder. Standard code groups written
// out by hand are decoded first; then every data byte and the twelve
// special codes are encoded in both disparities by the encoder and must
// decode back to the same byte and k flag with no error; finally a set of
// groups that are not in the code (all zeros, all ones, invalid 6b or 4b
// sub-blocks) must raise err.
module tb_xaui_dec8b10b;
  logic [9:0] din, enc;
  logic [7:0] dout, ed;
  logic       k, err, ek, erd, erd_out, ek_err;
  int checks = 0, failures = 0;

  xaui_dec8b10b dut (.din, .dout, .k, .err);
  xaui_enc8b10b enc_i (.din(ed), .k(ek), .rd_in(erd), .dout(enc), .rd_out(erd_out), .k_err(ek_err));

  function automatic logic [9:0] rev(input logic [9:0] v);
    for (int i = 0; i < 10; i++) rev[i] = v[9-i];
  endfunction

  task automatic chk(input logic [9:0] abc, input logic [7:0] d, input logic kk, input logic e);
    din = rev(abc); #1;
    checks++;
    if (err !== e || (!e && (dout !== d || k !== kk))) begin
      failures++;
      $display("FAIL %b: got %h k%0d err%0d exp %h k%0d err%0d", abc, dout, k, err, d, kk, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(10'b0011111010, 8'hBC, 1, 0);  // K28.5 RD-
    chk(10'b1100000101, 8'hBC, 1, 0);  // K28.5 RD+
    chk(10'b0011110011, 8'h7C, 1, 0);  // K28.3 RD-
    chk(10'b1100001100, 8'h7C, 1, 0);  // K28.3 RD+
    chk(10'b0011111001, 8'h3C, 1, 0);  // K28.1 RD-
    chk(10'b1100000110, 8'h3C, 1, 0);  // K28.1 RD+
    chk(10'b1101101000, 8'hFB, 1, 0);  // K27.7
    chk(10'b0010010111, 8'hFB, 1, 0);
    chk(10'b1011101000, 8'hFD, 1, 0);  // K29.7
    chk(10'b1010101010, 8'hB5, 0, 0);  // D21.5
    chk(10'b1000110111, 8'hF1, 0, 0);  // D17.7 A7
    chk(10'b0000000000, 8'h00, 0, 1);
    chk(10'b1111111111, 8'h00, 0, 1);
    chk(10'b1111001010, 8'h00, 0, 1);  // 6b 111100 invalid
    chk(10'b1010101111, 8'h00, 0, 1);  // 4b 1111 invalid
    chk(10'b1100100111, 8'h00, 0, 1);  // A7 after D19 is not in the code
    for (int rd = 0; rd < 2; rd++)
      for (int v = 0; v < 268; v++) begin
        if (v < 256) begin ed = v[7:0]; ek = 0; end
        else begin
          ek = 1;
          case (v - 256)
            0: ed = 8'h1C; 1: ed = 8'h3C; 2: ed = 8'h5C; 3: ed = 8'h7C; 4: ed = 8'h9C; 5: ed = 8'hBC;
            6: ed = 8'hDC; 7: ed = 8'hFC; 8: ed = 8'hF7; 9: ed = 8'hFB; 10: ed = 8'hFD; default: ed = 8'hFE;
          endcase
        end
        erd = rd[0]; #1;
        din = enc; #1;
        checks++;
        if (err || dout !== ed || k !== ek) begin
          failures++;
          $display("FAIL roundtrip %h k%0d rd%0d: code %b -> %h k%0d err%0d", ed, ek, rd, rev(enc), dout, k, err);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
