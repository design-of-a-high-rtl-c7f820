// Test-bench monitor of a 64-bit XGMII receive bus. It walks the bytes in
// line order (column 0 lanes 0-3, then column 1), and for every frame from
// Start (FB) to Terminate (FD) records the number of bytes in between and a
// running hash of them. It also counts Local Fault columns (9C 00 00 01)
// and control characters other than Idle/Start/Terminate/Sequence
// inside or outside frames, and Idle inside a frame (errors).
module tb_xgmii_mon (
  input logic        clk,
  input logic        en,     // count only while the design is out of reset
  input logic [63:0] rxd,
  input logic [7:0]  rxc
);
  int unsigned len_q [$];
  int unsigned hash_q [$];
  int lf_cols = 0, errors = 0;
  logic in_pkt = 0;
  int unsigned cnt = 0, hash = 0;

  always @(posedge clk) if (en) begin
    for (int c = 0; c < 2; c++) begin
      if (rxc[4*c +: 4] == 4'b0001 && rxd[32*c +: 32] == 32'h0100009C) lf_cols++;
      for (int i = 0; i < 4; i++) begin
        logic [7:0] b;
        b = rxd[32*c + 8*i +: 8];
        if (rxc[4*c + i]) begin
          if (b == 8'hFB) begin in_pkt = 1; cnt = 0; hash = 0; end
          else if (b == 8'hFD && in_pkt) begin
            in_pkt = 0; len_q.push_back(cnt); hash_q.push_back(hash);
          end else if (b != 8'h07 && b != 8'h9C) errors++;
          else if (in_pkt) begin errors++; in_pkt = 0; end
        end else if (in_pkt) begin
          cnt++; hash = hash * 31 + b;
        end
      end
    end
  end
endmodule
