// Self-checking test of one XAUI transceiver (BASE_CH = 4, like XAUI1).
// Reconfiguration side: frames are shifted in by the test. It checks the
// power-up settings (VOD 4, the rest 0), offset cancellation (done exactly
// LANES * OC_CYCLES clocks after the start pulse, channel by channel),
// writes of TX part, RX part and both into the addressed channel only, no
// acknowledge for channels of the other transceiver, read selection of the
// channel shown on reconfig_from_xcvr, and a dropped short frame.
// Data side: XGMII packets are sent first through the internal serial
// loopback, then through an external lane path built here that delays each
// lane by a random number of bits; in both cases the received XGMII column
// stream must equal the transmitted one once the lanes are aligned.
module tb_xaui_xcvr;
  import xaui_pkg::*;
  localparam int OC = 8;
  logic xclk = 0, rclk = 0, xrst = 1, rrst = 1;
  logic [63:0] txd, rxd; logic [7:0] txc, rxc;
  logic [3:0][19:0] tx_lane, rx_lane;
  logic loop = 1;
  logic [3:0] lane_sync; logic align, align_event, code_err;
  logic [3:0] to_x = 0; logic [16:0] from;
  analog_t [3:0] pma_set;
  int checks = 0, failures = 0;

  xaui_xcvr #(.BASE_CH(4), .OC_CYCLES(OC)) dut (
    .xgmii_clk(xclk), .xgmii_rst(xrst), .xgmii_txd(txd), .xgmii_txc(txc), .xgmii_rxd(rxd),
    .xgmii_rxc(rxc), .tx_lane, .rx_clk(xclk), .rx_rst(xrst), .rx_lane, .xgmii_loop(loop), .lane_sync, .align, .align_event,
    .code_err, .reconfig_clk(rclk), .reconfig_rst(rrst), .reconfig_to_xcvr(to_x),
    .reconfig_from_xcvr(from), .pma_set);
  always #3.2 xclk = ~xclk;
  always #5 rclk = ~rclk;

  initial begin
    #3000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic send_frame(input frame_t f, input int nbits, output logic acked);
    for (int i = 0; i < nbits; i++) begin
      @(negedge rclk); to_x = {2'b00, 1'b1, f[i]};
    end
    @(negedge rclk); to_x = 0;
    acked = 0;
    repeat (3) begin @(negedge rclk); if (from[11]) acked = 1; end
  endtask

  // external lane path with per-lane bit delay
  logic chq [4][$];
  always @(posedge xclk) begin
    for (int i = 0; i < 4; i++) begin
      for (int b = 0; b < 20; b++) chq[i].push_back(tx_lane[i][b]);
      for (int b = 0; b < 20; b++) rx_lane[i][b] <= chq[i].pop_front();
    end
  end

  // traffic: packets of incrementing bytes, columns recorded for comparison
  logic [35:0] sentq [$], recvq [$];
  int plen = 0, gap = 3; logic in_pkt = 0; logic [7:0] bytev = 0;
  task automatic gen_column(output logic [31:0] d, output logic [3:0] c);
    d = {4{XGMII_IDLE}}; c = 4'hF;
    if (!in_pkt) begin
      if (gap > 0) gap--;
      else begin d = {8'h55, 8'h55, 8'h55, XGMII_START}; c = 4'h1; in_pkt = 1; plen = 4 + $urandom % 40; end
    end else begin
      for (int i = 0; i < 4; i++) begin d[8*i +: 8] = bytev; bytev++; end
      c = 0;
      if (--plen == 0) begin d[31:24] = XGMII_TERM; c[3] = 1; in_pkt = 0; gap = 2 + $urandom % 20; end
    end
  endtask

  task automatic traffic(input int cycles);
    sentq.delete(); recvq.delete();
    for (int n = 0; n < cycles; n++) begin
      logic [31:0] d0, d1; logic [3:0] c0, c1;
      @(negedge xclk);
      gen_column(d0, c0); gen_column(d1, c1);
      sentq.push_back({c0, d0}); sentq.push_back({c1, d1});
      txd = {d1, d0}; txc = {c1, c0};
      if (align) begin recvq.push_back({rxc[3:0], rxd[31:0]}); recvq.push_back({rxc[7:4], rxd[63:32]}); end
    end
  endtask

  task automatic compare(input string what);
    int r0, s0;
    r0 = -1; s0 = -1;
    // skip what was still in flight from the previous call
    for (int r = 200; r < recvq.size() && r0 < 0; r++) if (recvq[r][35:32] == 0) r0 = r;
    // byte values repeat every 64 columns: match 100 columns in a row
    for (int s = 0; s + 100 < sentq.size() && r0 >= 0 && s0 < 0; s++) begin
      int ok;
      ok = 1;
      for (int k = 0; k < 100 && ok; k++) if (sentq[s + k] != recvq[r0 + k]) ok = 0;
      if (ok) s0 = s;
    end
    ck(s0 >= 0 && recvq.size() > 1000, {what, ": received stream found"});
    if (s0 >= 0) begin
      int bad;
      bad = 0;
      for (int r = r0; r < recvq.size(); r++) if (recvq[r] !== sentq[s0 + r - r0]) begin
        if (bad < 6) $display("  column %0d: got %h exp %h", r, recvq[r], sentq[s0 + r - r0]);
        bad++;
      end
      ck(bad == 0, $sformatf("%s: %0d columns differ", what, bad));
    end
  endtask

  initial begin
    logic acked;
    int cyc;
    frame_t f;
    txd = {8{XGMII_IDLE}}; txc = 8'hFF; rx_lane = '0;
    for (int i = 0; i < 4; i++) repeat ($urandom % 90) chq[i].push_back(1'b0);
    repeat (3) @(negedge rclk);
    xrst = 0; rrst = 0;
    @(negedge rclk);
    for (int i = 0; i < 4; i++) ck(pma_set[i] == ANALOG_DEFAULT, "power-up settings");
    // offset cancellation
    @(negedge rclk); to_x = 4'b0100; @(negedge rclk); to_x = 0;
    cyc = 1;
    while (!from[10] && cyc < 1000) begin
      @(negedge rclk); cyc++;
      if (cyc == OC + 1) ck(from[15:12] == 4'b0001, "channel 0 calibrated first");
    end
    ck(cyc == 4 * OC + 1, $sformatf("offset cancellation takes LANES*OC_CYCLES clocks (%0d)", cyc));
    // write both parts of channel 6 (local channel 2)
    f = '{set: '{vod: 3'd7, preemp: 3'd5, eqctrl: 2'd3, dcgain: 2'd2}, duplex: 2'b00, chan: 3'd6, write: 1'b1};
    send_frame(f, FRAME_BITS, acked);
    ck(acked, "write acknowledged");
    ck(pma_set[2] == f.set && pma_set[0] == ANALOG_DEFAULT && pma_set[1] == ANALOG_DEFAULT &&
       pma_set[3] == ANALOG_DEFAULT, "only channel 6 written");
    // TX part of channel 4
    f = '{set: '{vod: 3'd1, preemp: 3'd2, eqctrl: 2'd1, dcgain: 2'd1}, duplex: 2'b10, chan: 3'd4, write: 1'b1};
    send_frame(f, FRAME_BITS, acked);
    ck(acked && pma_set[0] == '{vod: 3'd1, preemp: 3'd2, eqctrl: 2'd0, dcgain: 2'd0}, "TX part only");
    // RX part of channel 7
    f = '{set: '{vod: 3'd0, preemp: 3'd0, eqctrl: 2'd2, dcgain: 2'd1}, duplex: 2'b01, chan: 3'd7, write: 1'b1};
    send_frame(f, FRAME_BITS, acked);
    ck(acked && pma_set[3] == '{vod: 3'd4, preemp: 3'd0, eqctrl: 2'd2, dcgain: 2'd1}, "RX part only");
    // channel of the other transceiver: ignored
    f = '{set: '{vod: 3'd0, preemp: 3'd0, eqctrl: 2'd0, dcgain: 2'd0}, duplex: 2'b00, chan: 3'd1, write: 1'b1};
    send_frame(f, FRAME_BITS, acked);
    ck(!acked && pma_set[1] == ANALOG_DEFAULT, "channel 1 belongs to the other port");
    // read selects channel 6
    f.write = 0; f.chan = 3'd6;
    send_frame(f, FRAME_BITS, acked);
    ck(acked && from[9:0] == pma_set[2], "read shows channel 6");
    // short frame dropped
    f = '{set: '{vod: 3'd2, preemp: 3'd2, eqctrl: 2'd2, dcgain: 2'd2}, duplex: 2'b00, chan: 3'd5, write: 1'b1};
    send_frame(f, FRAME_BITS - 3, acked);
    ck(!acked && from[16] && pma_set[1] == ANALOG_DEFAULT, "short frame dropped");
    // data path: internal loopback
    traffic(1500);
    ck(align && lane_sync == 4'hF, "aligned in loopback");
    compare("loopback");
    // external lanes with skew
    loop = 0;
    traffic(300);   // word sync and deskew are re-acquired on the new lanes
    traffic(1500);
    ck(align && lane_sync == 4'hF, "aligned on skewed external lanes");
    compare("external");
    ck(!code_err, "no code errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
