// Self-checking test of the XGXS receive path, fed by the transmit path.
// Random XGMII packets go through xaui_tx_pcs; between the two, every lane is
// delayed by its own random number of bits (0 to 110, which cuts the words
// at a different bit position per lane and skews the lanes by up to 11
// code groups). The test checks that the receiver shows Local Fault before
// alignment, reaches word sync and deskew, and then returns exactly the
// XGMII column stream that was sent (reserved control bytes come back as
// Error). At the end one bit of one lane is flipped and the error must show
// as an Error character on the XGMII and a code_err pulse.
module tb_xaui_rx_pcs;
  import xaui_pkg::*;
  logic clk = 0, rst = 1;
  logic [63:0] txd, rxd;
  logic [7:0]  txc, rxc;
  logic [3:0][19:0] tx_lane, rx_lane;
  logic a_sent, align, align_event, code_err;
  logic [3:0] lane_sync, realigned;
  int checks = 0, failures = 0, pkts = 0, lf_seen = 0, errs = 0;
  logic flip = 0;

  xaui_tx_pcs u_tx (.clk, .rst, .xgmii_txd(txd), .xgmii_txc(txc), .tx_lane, .a_sent);
  xaui_rx_pcs dut (.clk, .rst, .rx_lane, .xgmii_rxd(rxd), .xgmii_rxc(rxc), .lane_sync, .align,
                   .align_event, .realigned, .code_err);
  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // bit-level channel per lane
  logic chq [4][$];
  always @(posedge clk) begin
    for (int i = 0; i < 4; i++) begin
      for (int b = 0; b < 20; b++) chq[i].push_back(tx_lane[i][b]);
      for (int b = 0; b < 20; b++) rx_lane[i][b] <= chq[i].pop_front() ^ (flip && i == 2 && b == 3);
    end
  end

  // traffic generator: one column at a time
  int plen = 0, gap = 4, seq = 0;
  logic in_pkt = 0;
  task automatic gen_column(output logic [31:0] d, output logic [3:0] c);
    d = {4{XGMII_IDLE}}; c = 4'hF;
    if (!in_pkt) begin
      if (gap > 0) gap--;
      else begin d = {8'h55, 8'h55, 8'h55, XGMII_START}; c = 4'h1; in_pkt = 1; plen = 3 + $urandom % 30; pkts++; end
    end else begin
      seq++;
      d = {8'(seq), 8'(seq >> 8), 8'($urandom), 8'($urandom)}; c = 4'h0;
      if ($urandom % 50 == 0) begin d[23:16] = 8'h33; c[2] = 1'b1; end
      if (--plen == 0) begin
        int t;
        t = $urandom % 4;
        for (int i = 0; i < 4; i++)
          if (i == t) begin d[8*i +: 8] = XGMII_TERM; c[i] = 1; end
          else if (i > t) begin d[8*i +: 8] = XGMII_IDLE; c[i] = 1; end
        in_pkt = 0; gap = ($urandom % 3 == 0) ? 20 : 1 + $urandom % 4;
      end
    end
  endtask

  logic [35:0] sentq [$];   // {ctrl, data} per column, as the receiver must return it
  logic [35:0] recvq [$];

  initial begin
    for (int i = 0; i < 4; i++) begin
      int sk;
      sk = $urandom % 111;
      for (int b = 0; b < sk; b++) chq[i].push_back(1'b0);
    end
    rx_lane = '0;
    txd = {8{XGMII_IDLE}}; txc = 8'hFF;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] d[2];
      logic [3:0] c[2];
      @(negedge clk);
      for (int k = 0; k < 2; k++) begin
        logic [31:0] ed; logic [3:0] ec;
        gen_column(d[k], c[k]);
        ed = d[k]; ec = c[k];
        for (int i = 0; i < 4; i++)
          if (ec[i] && !(ed[8*i +: 8] inside {XGMII_IDLE, XGMII_START, XGMII_TERM, XGMII_SEQ, XGMII_ERROR}))
            ed[8*i +: 8] = XGMII_ERROR;
        sentq.push_back({ec, ed});
      end
      txd = {d[1], d[0]}; txc = {c[1], c[0]};
      if (!align && rxc == 8'h11 && rxd == {2{32'h0100009C}}) lf_seen++;
      if (align) begin
        recvq.push_back({rxc[3:0], rxd[31:0]});
        recvq.push_back({rxc[7:4], rxd[63:32]});
      end
    end
    checks++;
    if (lane_sync != 4'hF || !align) begin failures++; $display("FAIL no sync/align: %b %b", lane_sync, align); end
    // find the first received data column in the sent stream and compare
    begin
      int r0, s0;
      r0 = -1; s0 = -1;
      for (int r = 0; r < recvq.size() && r0 < 0; r++)
        if (recvq[r][35:32] == 4'h0) r0 = r;
      for (int s = 0; s < sentq.size() && r0 >= 0; s++)
        if (sentq[s] == recvq[r0]) begin s0 = s; break; end
      checks++;
      if (s0 < 0) begin failures++; $display("FAIL received stream not found in sent stream"); end
      else begin
        $display("latency %0d columns", s0 + (sentq.size() - recvq.size()) - r0);
        for (int r = r0; r < recvq.size(); r++) begin
          checks++;
          if (recvq[r] !== sentq[s0 + r - r0]) begin
            failures++;
            if (failures < 10) $display("FAIL column %0d: got %h exp %h", r, recvq[r], sentq[s0 + r - r0]);
          end
        end
      end
    end
    // bit error on lane 2
    @(negedge clk); flip = 1; @(negedge clk); flip = 0;
    repeat (40) begin
      @(negedge clk);
      if (code_err) errs++;
    end
    checks++;
    if (errs == 0) begin failures++; $display("FAIL injected bit error not reported"); end
    checks++;
    if (lf_seen == 0 || pkts < 100) begin failures++; $display("FAIL coverage lf=%0d pkts=%0d", lf_seen, pkts); end
    $display("packets %0d, local-fault columns %0d, code errors %0d", pkts, lf_seen, errs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
