// Self-checking test of the 8B/10B encoder. Reference code groups of the
// standard table are checked directly (K28.5, K28.3, K27.7, K29.7, D21.5,
// D0.0, D7.7 ...), then every byte and special code is encoded in both
// running disparities and checked for: disparity of the group 0 or +-2 in
// the right direction, the running disparity update, at most five equal
// bits in a row across a long random stream, and a unique code group per
// (byte, k) in each disparity.
module tb_xaui_enc8b10b;
  logic [7:0] din;
  logic       k, rd_in, rd_out, k_err;
  logic [9:0] dout;
  int checks = 0, failures = 0;

  xaui_enc8b10b dut (.din, .k, .rd_in, .dout, .rd_out, .k_err);

  // reference in abcdei fghj notation, a leftmost
  function automatic logic [9:0] rev(input logic [9:0] v);
    for (int i = 0; i < 10; i++) rev[i] = v[9-i];
  endfunction

  task automatic chk(input logic [7:0] d, input logic kk, input logic rd,
                     input logic [9:0] exp_abc, input logic exp_rd);
    din = d; k = kk; rd_in = rd; #1;
    checks++;
    if (dout !== rev(exp_abc) || rd_out !== exp_rd) begin
      failures++;
      $display("FAIL %s%0d.%0d rd%0d: got %b rd%0d exp %b rd%0d", kk ? "K" : "D",
               d[4:0], d[7:5], rd, rev(dout), rd_out, exp_abc, exp_rd);
    end
  endtask

  function automatic int ones(input logic [9:0] v);
    ones = 0;
    for (int i = 0; i < 10; i++) ones += int'(v[i]);
  endfunction

  logic [9:0] seen [2][512];

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // table values (IEEE 802.3 clause 36)
    chk(8'hBC, 1, 0, 10'b0011111010, 1);  // K28.5
    chk(8'hBC, 1, 1, 10'b1100000101, 0);
    chk(8'h7C, 1, 0, 10'b0011110011, 1);  // K28.3
    chk(8'h7C, 1, 1, 10'b1100001100, 0);
    chk(8'h1C, 1, 0, 10'b0011110100, 0);  // K28.0
    chk(8'h9C, 1, 0, 10'b0011110010, 0);  // K28.4
    chk(8'hFB, 1, 0, 10'b1101101000, 0);  // K27.7
    chk(8'hFB, 1, 1, 10'b0010010111, 1);
    chk(8'hFD, 1, 0, 10'b1011101000, 0);  // K29.7
    chk(8'hFE, 1, 0, 10'b0111101000, 0);  // K30.7
    chk(8'hB5, 0, 0, 10'b1010101010, 0);  // D21.5
    chk(8'h00, 0, 0, 10'b1001110100, 0);  // D0.0
    chk(8'h00, 0, 1, 10'b0110001011, 1);
    chk(8'hE7, 0, 0, 10'b1110001110, 1);  // D7.7 RD-
    chk(8'hF1, 0, 0, 10'b1000110111, 1);  // D17.7 RD- uses A7
    chk(8'hEB, 0, 1, 10'b1101001000, 0);  // D11.7 RD+ uses A7
    chk(8'h4A, 0, 0, 10'b0101010101, 0);  // D10.2
    chk(8'h63, 0, 1, 10'b1100010011, 1);  // D3.3 RD+
    // properties over all codes
    for (int rd = 0; rd < 2; rd++)
      for (int v = 0; v < 512; v++) seen[rd][v] = '1;
    for (int rd = 0; rd < 2; rd++) begin
      for (int v = 0; v < 268; v++) begin
        logic [7:0] d;
        logic kk;
        if (v < 256) begin d = v[7:0]; kk = 0; end
        else begin
          kk = 1;
          case (v - 256)
            0: d = 8'h1C; 1: d = 8'h3C; 2: d = 8'h5C; 3: d = 8'h7C; 4: d = 8'h9C; 5: d = 8'hBC;
            6: d = 8'hDC; 7: d = 8'hFC; 8: d = 8'hF7; 9: d = 8'hFB; 10: d = 8'hFD; default: d = 8'hFE;
          endcase
        end
        din = d; k = kk; rd_in = rd[0]; #1;
        checks++;
        if (k_err) begin failures++; $display("FAIL k_err on %h", d); end
        checks++;
        if (!((ones(dout) == 5 && rd_out == rd_in) ||
              (ones(dout) == 6 && !rd_in && rd_out) ||
              (ones(dout) == 4 && rd_in && !rd_out))) begin
          failures++;
          $display("FAIL disparity %h k%0d rd%0d: %b ones=%0d rd_out=%0d", d, kk, rd, dout, ones(dout), rd_out);
        end
        for (int u = 0; u < 512; u++) if (seen[rd][u] == dout && u != v) begin
          failures++; $display("FAIL duplicate code %b", dout);
        end
        seen[rd][v] = dout;
      end
    end
    // random stream: run length <= 5
    begin
      logic r;
      int run;
      logic last;
      r = 0; run = 0; last = 0;
      for (int n = 0; n < 4000; n++) begin
        din = $urandom; k = ($urandom % 8 == 0); if (k) din = 8'hBC;
        rd_in = r; #1;
        for (int i = 0; i < 10; i++) begin
          if (dout[i] == last) run++; else begin run = 1; last = dout[i]; end
          if (run > 5) begin failures++; $display("FAIL run length"); run = 0; end
        end
        r = rd_out;
      end
      checks++;
    end
    // an illegal control byte is flagged
    din = 8'h55; k = 1; rd_in = 0; #1; checks++;
    if (!k_err) begin failures++; $display("FAIL k_err"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
