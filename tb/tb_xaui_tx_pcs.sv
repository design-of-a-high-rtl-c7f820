// Self-checking test of the XGXS transmit path. Random XGMII traffic
// (idle gaps, Start in lane 0 of either column, data, Terminate in any lane,
// the occasional Sequence and reserved control byte) is driven; the lane
// code groups are decoded again with the 8B/10B decoder and compared, one
// clock later, with the mapping worked out here from the XGMII input. The
// test also checks the running disparity of every lane, the spacing of
// ||A|| columns (exactly A_PERIOD columns while the link idles) and that
// ||A|| only replaces all-idle columns.
module tb_xaui_tx_pcs;
  import xaui_pkg::*;
  localparam int unsigned A_PERIOD = 16;
  logic clk = 0, rst = 1;
  logic [63:0] txd;
  logic [7:0]  txc;
  logic [3:0][19:0] tx_lane;
  logic a_sent;
  int checks = 0, failures = 0;
  int a_cols = 0, k_cols = 0, pkts = 0;

  xaui_tx_pcs #(.A_PERIOD(A_PERIOD)) dut (.clk, .rst, .xgmii_txd(txd), .xgmii_txc(txc),
                                          .tx_lane, .a_sent);
  always #5 clk = ~clk;

  logic [7:0] dd [4][2];
  logic       dk [4][2], de [4][2];
  for (genvar i = 0; i < 4; i++) begin : g_d
    for (genvar c = 0; c < 2; c++) begin : g_c
      xaui_dec8b10b u (.din(tx_lane[i][10*c +: 10]), .dout(dd[i][c]), .k(dk[i][c]), .err(de[i][c]));
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ones(input logic [9:0] v);
    ones = 0;
    for (int i = 0; i < 10; i++) ones += int'(v[i]);
  endfunction

  // stimulus generator state
  int plen = 0, gap = 0;
  logic in_pkt = 0;
  logic [63:0] ptxd;
  logic [7:0]  ptxc;
  int since_a = 0;
  int rdisp [4];

  task automatic gen_column(output logic [31:0] d, output logic [3:0] c, input int col);
    d = {4{XGMII_IDLE}}; c = 4'hF;
    if (!in_pkt) begin
      if (gap > 0) gap--;
      else begin
        d = {$urandom, XGMII_START}; d[7:0] = XGMII_START; c = 4'h1;
        in_pkt = 1; plen = 2 + $urandom % 20; pkts++;
        if ($urandom % 16 == 0) begin d = {8'h00, 8'h00, 8'h01, XGMII_SEQ}; c = 4'h1; in_pkt = 0; gap = 1; end
      end
    end else begin
      d = $urandom; c = 4'h0;
      if ($urandom % 32 == 0) begin d[15:8] = 8'h5A; c[1] = 1'b1; end  // reserved control -> /E/
      plen--;
      if (plen == 0) begin
        int t;
        t = $urandom % 4;
        for (int i = 0; i < 4; i++) begin
          if (i == t) begin d[8*i +: 8] = XGMII_TERM; c[i] = 1; end
          else if (i > t) begin d[8*i +: 8] = XGMII_IDLE; c[i] = 1; end
        end
        in_pkt = 0;
        gap = ($urandom % 4 == 0) ? 40 : $urandom % 6;
      end
    end
  endtask

  initial begin
    txd = {8{XGMII_IDLE}}; txc = 8'hFF;
    for (int i = 0; i < 4; i++) rdisp[i] = -1;
    repeat (3) @(posedge clk);
    rst = 0;
    // the first output after reset: no check of disparity state needed; start
    @(negedge clk);
    for (int n = 0; n < 3000; n++) begin
      logic [31:0] d0, d1;
      logic [3:0]  c0, c1;
      gen_column(d0, c0, 0);
      gen_column(d1, c1, 1);
      txd = {d1, d0}; txc = {c1, c0};
      ptxd = txd; ptxc = txc;
      @(posedge clk); #1;
      // the input applied before this edge is registered at it: one clock
      if (n > 0) for (int c = 0; c < 2; c++) begin
        logic idle_col, all_a;
        idle_col = 1; all_a = 1;
        for (int i = 0; i < 4; i++) begin
          if (!(ptxc[4*c+i] && ptxd[32*c+8*i +: 8] == XGMII_IDLE)) idle_col = 0;
          if (!(dk[i][c] && dd[i][c] == K28_3)) all_a = 0;
        end
        since_a++;
        for (int i = 0; i < 4; i++) begin
          logic [7:0] b, eb;
          logic ek;
          b = ptxd[32*c+8*i +: 8];
          ek = ptxc[4*c+i];
          if (!ek) eb = b;
          else if (idle_col) eb = all_a ? K28_3 : K28_5;
          else if (b == XGMII_IDLE) eb = K28_5;
          else if (b == XGMII_START || b == XGMII_TERM || b == XGMII_SEQ || b == XGMII_ERROR) eb = b;
          else eb = K30_7;
          checks++;
          if (de[i][c] || dk[i][c] !== ek || dd[i][c] !== eb) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d col%0d lane%0d: got %h k%0d e%0d exp %h k%0d", n, c, i, dd[i][c], dk[i][c], de[i][c], eb, ek);
          end
          // running disparity
          begin
            int o;
            o = ones(tx_lane[i][10*c +: 10]);
            if (o == 6) begin if (rdisp[i] != -1) begin failures++; $display("FAIL disparity lane%0d", i); end rdisp[i] = 1; end
            else if (o == 4) begin if (rdisp[i] != 1) begin failures++; $display("FAIL disparity lane%0d", i); end rdisp[i] = -1; end
            else if (o != 5) begin failures++; $display("FAIL ones=%0d", o); end
          end
        end
        if (all_a) begin
          checks++;
          a_cols++;
          if (!idle_col || since_a < A_PERIOD) begin failures++; $display("FAIL ||A|| at n=%0d since=%0d", n, since_a); end
          since_a = 0;
        end else if (idle_col) begin
          k_cols++;
          checks++;
          if (since_a > A_PERIOD) begin failures++; $display("FAIL ||A|| late (since=%0d)", since_a); end
        end
      end
    end
    checks++;
    if (a_cols < 10 || k_cols < 10 || pkts < 50) begin failures++; $display("FAIL coverage a=%0d k=%0d pkts=%0d", a_cols, k_cols, pkts); end
    $display("A columns %0d, K columns %0d, packets %0d", a_cols, k_cols, pkts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
