// Self-checking test of the dynamic reconfiguration controller. The two
// transceivers are replaced by a model written here that deserialises the
// frames, keeps settings for channels 0-6 (channel 7 never answers) and
// acknowledges. The test checks the start-up sequence (port reset, offset
// cancellation start, busy until both ports report done, error for a
// request made meanwhile), every legal pre-emphasis code and all VOD codes
// against the setting numbers of the source's Table 3, the duplex field
// (TX part / RX part / both), the read path back into Table 3 codes, the
// reserved codes that must raise reconfig_error without a frame, the
// acknowledge timeout, and the length of a write (busy for FRAME_BITS + 4
// clocks).
module tb_xaui_reconfig;
  import xaui_pkg::*;
  logic clk = 0, rst = 1;
  logic [1:0] dcgain = 0, eq = 0, duplex = 0;
  logic [4:0] preemp = 0;
  logic [2:0] vod = 4, chan = 0;
  logic write_all = 0, read = 0;
  logic [3:0] to_x;
  logic err, busy;
  logic [16:0] from0, from1;
  logic [2:0] rd_vod; logic [4:0] rd_pre; logic [1:0] rd_eq, rd_dc; logic dv;
  int checks = 0, failures = 0;

  xaui_reconfig dut (.reconfig_clk(clk), .rst, .lmpi_rx_eqdcgain(dcgain), .lmpi_rx_eqctrl(eq),
    .lmpi_tx_preemp(preemp), .lmpi_tx_vodctrl(vod), .lmpi_rx_tx_duplex_sel(duplex),
    .lmpi_write_all(write_all), .lmpi_read(read), .lmpi_channel_address(chan),
    .reconfig_to_xcvr(to_x), .reconfig_error(err), .reconfig_busy(busy),
    .xaui0_reconfig_from_xcvr(from0), .xaui1_reconfig_from_xcvr(from1),
    .rd_tx_vodctrl(rd_vod), .rd_tx_preemp(rd_pre), .rd_rx_eqctrl(rd_eq), .rd_rx_eqdcgain(rd_dc),
    .data_valid(dv));
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- transceiver model ----
  logic [15:0] sh; int nb = 0; int frames = 0, rst_pulses = 0, oc_pulses = 0;
  logic [9:0] set [8];
  logic [2:0] sel [2];
  logic ack [2], ocd [2];
  int oc_timer = 0;
  logic [15:0] last_frame;
  always @(posedge clk) begin
    ack[0] <= 0; ack[1] <= 0;
    if (to_x[3]) rst_pulses++;
    if (to_x[2]) begin oc_pulses++; ocd[0] <= 0; ocd[1] <= 0; oc_timer = 50; end
    else if (oc_timer > 0) begin oc_timer--; if (oc_timer == 0) begin ocd[0] <= 1; ocd[1] <= 1; end end
    if (to_x[1]) begin sh = {to_x[0], sh[15:1]}; nb++; end
    else if (nb != 0) begin
      logic [2:0] c;
      frames++;
      last_frame = sh;
      c = sh[3:1];
      if (nb == 16 && c != 3'd7) begin
        ack[c[2]] <= 1; sel[c[2]] <= c;
        if (sh[0]) begin
          if (sh[5:4] != 2'b01) set[c][9:4] = sh[15:10];
          if (sh[5:4] != 2'b10) set[c][3:0] = sh[9:6];
        end
      end
      nb = 0;
    end
  end
  assign from0 = {5'b0, ack[0], ocd[0], set[sel[0]]};
  assign from1 = {5'b0, ack[1], ocd[1], set[sel[1]]};

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // issue a request, return number of busy clocks
  task automatic request(input logic w, output int cycles);
    @(negedge clk);
    if (w) write_all = 1; else read = 1;
    @(negedge clk);
    write_all = 0; read = 0;
    cycles = 1;
    while (busy && cycles < 100) begin @(negedge clk); cycles++; end
  endtask

  int preemp_code [7] = '{5'b00000, 5'b00001, 5'b00101, 5'b01001, 5'b01101, 5'b10001, 5'b10101};

  initial begin
    int cyc, f0;
    for (int i = 0; i < 8; i++) set[i] = {3'd4, 3'd0, 2'd0, 2'd0};
    sel[0] = 0; sel[1] = 4; ack[0] = 0; ack[1] = 0; ocd[0] = 0; ocd[1] = 0; sh = 0;
    repeat (2) @(negedge clk);
    rst_pulses = 0; oc_pulses = 0; frames = 0; nb = 0;   // ignore what flops showed before reset
    rst = 0;
    @(negedge clk);
    ck(busy, "busy after reset");
    repeat (5) @(negedge clk);
    ck(rst_pulses == 1 && oc_pulses == 1, $sformatf("port reset and offset cancellation started (%0d %0d)", rst_pulses, oc_pulses));
    // request during offset cancellation
    write_all = 1; @(negedge clk); write_all = 0;
    @(negedge clk);
    ck(err, "request during offset cancellation flagged");
    cyc = 0;
    while (busy && cyc < 200) begin @(negedge clk); cyc++; end
    ck(!busy && cyc > 30 && cyc < 60, $sformatf("busy until offset cancellation done (%0d)", cyc));
    ck(frames == 0, "no frame during offset cancellation");
    // every legal pre-emphasis code, VOD codes, both duplex parts
    for (int p = 0; p < 7; p++) begin
      chan = 3'(p); preemp = 5'(preemp_code[p]); vod = (p == 3) ? 3'd7 : 3'(p);
      eq = 2'(p); dcgain = 2'(p % 3); duplex = 2'b00;
      f0 = frames;
      request(1, cyc);
      ck(!err, "legal write accepted");
      ck(cyc == FRAME_BITS + 4, $sformatf("write takes FRAME_BITS+4 clocks (%0d)", cyc));
      ck(frames == f0 + 1 && last_frame[0] == 1 && last_frame[3:1] == chan, "frame write and channel");
      ck(set[p] == {vod, 3'(p), 2'(p), 2'(p % 3)}, $sformatf("setting numbers ch%0d: %b", p, set[p]));
    end
    // TX part only
    chan = 1; duplex = 2'b10; vod = 3'd6; preemp = 5'b10101; eq = 3; dcgain = 2;
    request(1, cyc);
    ck(set[1] == {3'd6, 3'd6, 2'd1, 2'd1}, "TX part only written");
    // RX part only, with an otherwise illegal VOD code (ignored for RX)
    duplex = 2'b01; vod = 3'b011; preemp = 5'b11111; eq = 2; dcgain = 0;
    request(1, cyc);
    ck(!err && set[1] == {3'd6, 3'd6, 2'd2, 2'd0}, "RX part only written");
    // read back in Table 3 codes
    for (int p = 0; p < 7; p++) begin
      logic got_dv;
      chan = 3'(p); duplex = 0;
      @(negedge clk); read = 1; @(negedge clk); read = 0;
      got_dv = 0;
      for (int n = 0; n < 40 && !got_dv; n++) begin
        if (dv) begin
          got_dv = 1;
          ck(rd_vod == set[p][9:7] && rd_eq == set[p][3:2] && rd_dc == set[p][1:0], "read back vod/eq/dcgain");
          ck(rd_pre == ((set[p][6:4] == 0) ? 5'd0 : 5'(4 * (set[p][6:4] - 1) + 1)), "read back preemp code");
        end
        @(negedge clk);
      end
      ck(got_dv, "data_valid after read");
    end
    // reserved codes
    chan = 2; duplex = 0; vod = 3'b011; preemp = 0; eq = 0; dcgain = 0;
    f0 = frames; request(1, cyc); ck(err && frames == f0, "VOD 3'b011 rejected");
    vod = 4; preemp = 5'b00010; request(1, cyc); ck(err && frames == f0, "preemp 5'b00010 rejected");
    preemp = 0; dcgain = 2'b11; request(1, cyc); ck(err && frames == f0, "dcgain 2'b11 rejected");
    dcgain = 0; duplex = 2'b11; request(1, cyc); ck(err && frames == f0, "duplex 2'b11 rejected");
    duplex = 0; request(1, cyc); ck(!err, "error cleared by next good request");
    // request while busy
    @(negedge clk); write_all = 1; @(negedge clk); write_all = 0; repeat (3) @(negedge clk);
    read = 1; @(negedge clk); read = 0;
    while (busy) @(negedge clk);
    ck(err, "request while busy flagged");
    // channel without acknowledge
    chan = 7; request(1, cyc);
    ck(err, "acknowledge timeout flagged");
    $display("frames %0d", frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
