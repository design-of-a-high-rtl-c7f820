// End-to-end test of the XAUI design at its default parameters.
// Management clock 100 MHz, XGMII clock 156.25 MHz. XAUI1 is connected to an
// external lane model that delays each of its four lanes by a random
// number of bits and hands them over on a recovered clock 0.2 % slower
// than xgmii_clk, so that XAUI1's rate-match FIFO must insert Idle words
// (0.4 % faster in the second half, so that it must delete them);
// XAUI0's lanes start disconnected, so it only works in
// serial loopback. Through the LMPI register bus the test waits for the
// start-up offset cancellation, writes and reads back Analog Controls
// settings of a channel of XAUI1, issues a reserved code that must be
// refused, and turns on the loopback of XAUI0. It then sends the fourteen
// frames of the source's upstream packet table (lengths 0x588 ... 0xd2,
// preceded by the 7-byte preamble and SFD, incrementing payload bytes as in
// the source's waveform) and checks that every frame arrives with the same
// length and contents on both ports and on the selected output. Then the
// working channel fails (loopback off, no signal): XAUI0 must lose sync and
// report Local Fault, xaui_sel switches to XAUI1, and the fourteen frames
// are sent again and must arrive on the selected output. Each mechanism is
// counted and one that never happened is a failure.
module tb_xaui_top;
  import xaui_pkg::*;
  logic mclk = 0, xclk = 0, rst = 1;
  logic cs = 0, wen = 0, ren = 0; logic [7:0] addr = 0; logic [15:0] data = 0, rdata;
  logic xaui_sel = 0;
  logic [63:0] txd, rxd0, rxd1, rxd; logic [7:0] txc, rxc0, rxc1, rxc;
  logic [3:0][19:0] tx0, rx0, tx1, rx1;
  analog_t [3:0] set0, set1;
  int checks = 0, failures = 0;
  logic link0 = 0;

  xaui_top dut (
    .phy_mgmt_clk(mclk), .rst, .gmpi_xaui_cs(cs), .gmpi_addr(addr), .gmpi_data(data),
    .gmpi_wen(wen), .gmpi_ren(ren), .gmpi_rdata(rdata), .xaui_sel,
    .xgmii_clk(xclk), .xgmii_txd(txd), .xgmii_txc(txc),
    .xaui0_xgmii_rxd(rxd0), .xaui0_xgmii_rxc(rxc0), .xaui1_xgmii_rxd(rxd1), .xaui1_xgmii_rxc(rxc1),
    .xgmii_rxd(rxd), .xgmii_rxc(rxc), .xaui0_tx_lane(tx0), .xaui0_rx_clk(xclk), .xaui0_rx_lane(rx0),
    .xaui1_tx_lane(tx1), .xaui1_rx_clk(rclk1), .xaui1_rx_lane(rx1), .xaui0_pma_set(set0), .xaui1_pma_set(set1));
  always #5 mclk = ~mclk;
  always #3.2 xclk = ~xclk;
  // recovered clock of XAUI1: its far end first runs 0.2 % slow, so the
  // rate-match FIFO has to insert Idle words, later 0.4 % fast, so it has to
  // delete them (the lane model's queue absorbs the difference)
  logic rclk1 = 0;
  real rhalf = 3.2064;
  always #(rhalf) rclk1 = ~rclk1;

  tb_xgmii_mon mon0 (.clk(xclk), .en(!rst), .rxd(rxd0), .rxc(rxc0));
  tb_xgmii_mon mon1 (.clk(xclk), .en(!rst), .rxd(rxd1), .rxc(rxc1));
  tb_xgmii_mon mons (.clk(xclk), .en(!rst), .rxd(rxd),  .rxc(rxc));

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lanes: XAUI1 through a bit-delay model, XAUI0 connected only when link0
  logic chq [4][$];
  always @(posedge xclk) begin
    for (int i = 0; i < 4; i++) begin
      for (int b = 0; b < 20; b++) chq[i].push_back(tx1[i][b]);
      rx0[i] <= link0 ? tx0[i] : 20'h0;
    end
  end
  int n_starve = 0;
  always @(posedge rclk1)
    for (int i = 0; i < 4; i++) begin
      if (chq[i].size() < 20) n_starve++;
      for (int b = 0; b < 20; b++) rx1[i][b] <= chq[i].size() > 0 ? chq[i].pop_front() : 1'b0;
    end

  // mechanism counters
  int n_oc = 0, n_wr = 0, n_rd = 0, n_err = 0, n_loop = 0, n_ext = 0, n_deskew = 0,
      n_loss = 0, n_lf = 0, n_switch = 0;
  int n_ins = 0, n_del = 0;
  always @(posedge rclk1) if (!rst && dut.u_xaui1.u_rx.align_event) n_deskew++;
  always @(posedge xclk) if (!rst && dut.u_xaui1.u_rm.ins) n_ins++;
  always @(posedge rclk1) if (!rst && dut.u_xaui1.u_rm.del) n_del++;

  // loopback latency: clock edges from the first /S/ sampled on the transmit
  // bus to the first /S/ on XAUI0's receive bus
  int cyc = 0, t_tx = -1, t_rx = -1;
  logic meas = 0;
  always @(posedge xclk) begin
    cyc++;
    if (meas) for (int i = 0; i < 8; i++) begin
      if (t_tx < 0 && txc[i] && txd[8*i +: 8] == XGMII_START) t_tx = cyc;
      if (t_tx >= 0 && t_rx < 0 && rxc0[i] && rxd0[8*i +: 8] == XGMII_START) t_rx = cyc;
    end
  end

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask
  task automatic wr(input logic [7:0] a, input logic [15:0] d);
    @(negedge mclk); cs = 1; addr = a; data = d; wen = 1;
    @(negedge mclk); cs = 0; wen = 0;
    @(negedge mclk);
  endtask
  task automatic rdreg(input logic [7:0] a, output logic [15:0] d);
    @(negedge mclk); cs = 1; addr = a; ren = 1;
    @(negedge mclk); cs = 0; ren = 0; d = rdata;
  endtask
  task automatic wait_idle(output int polls);
    logic [15:0] v;
    polls = 0;
    do begin rdreg(8'h08, v); polls++; end while (v[0] && polls < 1000);
  endtask

  // frames of the source's Table 4 (lengths in hex)
  int unsigned lengths [14] = '{'h588, 'h577, 'h5a, 'h151, 'h12f, 'h230, 'h440, 'ha5, 'h72,
                                'h2c1, 'hfb, 'h511, 'h582, 'hd2};
  int unsigned exp_len [$], exp_hash [$];
  logic [8:0] byteq [$];   // {ctrl, byte}

  task automatic queue_frames(input int base);
    for (int p = 0; p < 14; p++) begin
      int unsigned h;
      int gap;
      gap = 12 + $urandom % 24;
      repeat (gap) byteq.push_back({1'b1, XGMII_IDLE});
      while (byteq.size() % 4 != 0) byteq.push_back({1'b1, XGMII_IDLE});
      byteq.push_back({1'b1, XGMII_START});
      h = 0;
      for (int k = 0; k < 7; k++) begin
        logic [7:0] b;
        b = (k == 6) ? 8'hD5 : 8'h55;
        byteq.push_back({1'b0, b}); h = h * 31 + b;
      end
      for (int k = 0; k < lengths[p]; k++) begin
        logic [7:0] b;
        b = 8'(base + p + k);
        byteq.push_back({1'b0, b}); h = h * 31 + b;
      end
      byteq.push_back({1'b1, XGMII_TERM});
      exp_len.push_back(7 + lengths[p]); exp_hash.push_back(h);
    end
    repeat (64) byteq.push_back({1'b1, XGMII_IDLE});
    while (byteq.size() % 8 != 0) byteq.push_back({1'b1, XGMII_IDLE});
  endtask

  task automatic send_all();
    while (byteq.size() > 0) begin
      @(negedge xclk);
      for (int i = 0; i < 8; i++) begin
        logic [8:0] e;
        e = byteq.pop_front();
        txc[i] = e[8]; txd[8*i +: 8] = e[7:0];
      end
    end
    @(negedge xclk); txd = {8{XGMII_IDLE}}; txc = 8'hFF;
    repeat (200) @(negedge xclk);
  endtask

  function automatic int match(ref int unsigned lq[$], ref int unsigned hq[$], input int from_idx);
    int good;
    good = 0;
    for (int p = 0; p < 14; p++)
      if (from_idx + p < lq.size() && lq[from_idx + p] == exp_len[p] && hq[from_idx + p] == exp_hash[p]) good++;
    return good;
  endfunction

  initial begin
    logic [15:0] v;
    int polls, g, base0, base1, bases;
    txd = {8{XGMII_IDLE}}; txc = 8'hFF;
    // 400 bits of slack on every lane for the fast phase, plus the skew
    for (int i = 0; i < 4; i++) repeat (400 + $urandom % 100) chq[i].push_back(1'b0);
    repeat (4) @(negedge mclk);
    rst = 0;
    repeat (4) @(negedge mclk);
    // offset cancellation at start-up
    rdreg(8'h08, v);
    wait_idle(polls);
    ck(v[0] && polls > 3, $sformatf("busy during offset cancellation (%0d polls)", polls));
    if (v[0]) n_oc++;
    rdreg(8'h04, v); ck(v == 4, "default VOD 4");
    for (int i = 0; i < 4; i++) ck(set0[i] == ANALOG_DEFAULT && set1[i] == ANALOG_DEFAULT, "default PMA settings");
    // Analog Controls write to channel 5 (XAUI1 lane 1)
    wr(8'h02, 5); wr(8'h03, 0); wr(8'h04, 6); wr(8'h05, 16'b01001); wr(8'h06, 2); wr(8'h07, 1);
    wr(8'h01, 1);
    wait_idle(polls);
    rdreg(8'h08, v);
    ck(!v[1], "write accepted");
    ck(set1[1] == '{vod: 3'd6, preemp: 3'd3, eqctrl: 2'd2, dcgain: 2'd1}, "channel 5 written");
    ck(set1[0] == ANALOG_DEFAULT && set0[1] == ANALOG_DEFAULT, "other channels unchanged");
    if (set1[1].vod == 6) n_wr++;
    // read back
    wr(8'h04, 0); wr(8'h05, 0); wr(8'h06, 0); wr(8'h07, 0);
    wr(8'h01, 2);
    wait_idle(polls);
    rdreg(8'h08, v); ck(v[2], "read data valid");
    rdreg(8'h09, v);
    ck(v[11:0] == {2'd1, 2'd2, 5'b01001, 3'd6}, $sformatf("read back channel 5 (%h)", v));
    if (v[2:0] == 6) n_rd++;
    // reserved pre-emphasis code
    wr(8'h05, 16'b00011); wr(8'h01, 1);
    wait_idle(polls);
    rdreg(8'h08, v); ck(v[1], "reserved code refused");
    if (v[1]) n_err++;
    ck(set1[1].preemp == 3'd3, "refused write changed nothing");
    // serial loopback on XAUI0
    wr(8'h0A, 16'h0001);
    repeat (400) @(negedge xclk);
    rdreg(8'h0B, v); ck(v[4:0] == 5'h1F, $sformatf("XAUI0 aligned in loopback (%h)", v));
    rdreg(8'h0C, v); ck(v[4:0] == 5'h1F, $sformatf("XAUI1 aligned on external lanes (%h)", v));
    // traffic through both ports
    base0 = mon0.len_q.size(); base1 = mon1.len_q.size(); bases = mons.len_q.size();
    queue_frames(8'h28);
    meas = 1;
    send_all();
    meas = 0;
    $display("XAUI0 loopback latency: %0d xgmii_clk cycles", t_rx - t_tx);
    ck(t_tx >= 0 && t_rx > t_tx && t_rx - t_tx < 40, $sformatf("loopback latency %0d cycles", t_rx - t_tx));
    g = match(mon0.len_q, mon0.hash_q, base0); ck(g == 14, $sformatf("XAUI0 received %0d of 14 frames", g)); n_loop += g;
    g = match(mon1.len_q, mon1.hash_q, base1); ck(g == 14, $sformatf("XAUI1 received %0d of 14 frames", g)); n_ext += g;
    g = match(mons.len_q, mons.hash_q, bases); ck(g == 14, $sformatf("selected output (XAUI0) %0d of 14", g));
    ck(mon0.errors == 0 && mon1.errors == 0 && mons.errors == 0,
       $sformatf("no error characters (%0d %0d %0d)", mon0.errors, mon1.errors, mons.errors));
    // XAUI1's far end now runs fast
    rhalf = 3.1872;
    // working channel fails; switch to protection channel
    wr(8'h0A, 16'h0000);
    repeat (300) @(negedge xclk);
    rdreg(8'h0B, v); ck(v[4] == 0, "XAUI0 lost alignment");
    if (v[4] == 0) n_loss++;
    ck(mon0.lf_cols > 0, "XAUI0 reports Local Fault");
    if (mon0.lf_cols > 0) n_lf++;
    xaui_sel = 1;
    repeat (10) @(negedge xclk);
    rdreg(8'h08, v); ck(v[3], "status shows xaui_sel");
    exp_len.delete(); exp_hash.delete();
    base0 = mon0.len_q.size(); bases = mons.len_q.size(); base1 = mon1.len_q.size();
    queue_frames(8'h90);
    send_all();
    g = match(mons.len_q, mons.hash_q, bases); ck(g == 14, $sformatf("selected output (XAUI1) %0d of 14", g)); n_switch += g;
    g = match(mon1.len_q, mon1.hash_q, base1); ck(g == 14, "XAUI1 still carries the frames"); n_ext += g;
    ck(mon0.len_q.size() == base0, "no frames from the failed XAUI0");
    // mechanisms
    ck(n_oc > 0, "offset cancellation seen");
    ck(n_wr > 0 && n_rd > 0 && n_err > 0, "reconfiguration write, read and error seen");
    ck(n_loop > 0, "serial loopback carried traffic");
    ck(n_ext > 0 && n_deskew > 0, "deskewed external lanes carried traffic");
    ck(n_ins > 0 && n_del > 0, "rate match inserted and deleted Idle words");
    ck(n_starve == 0, "lane model never ran dry");
    ck(n_loss > 0 && n_lf > 0 && n_switch > 0, "link loss and protection switch seen");
    $display("mechanisms: offset_cancel=%0d write=%0d read=%0d error=%0d loopback_frames=%0d external_frames=%0d deskew=%0d link_loss=%0d local_fault=%0d switched_frames=%0d rate_match_insert=%0d rate_match_delete=%0d",
             n_oc, n_wr, n_rd, n_err, n_loop, n_ext, n_deskew, n_loss, n_lf, n_switch, n_ins, n_del);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
