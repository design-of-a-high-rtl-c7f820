// Self-checking test of the rate-match FIFO. A stream of XGMII words is
// generated here: frames of 3 to 40 words (a Start word, data words made
// unique by a counter, a Terminate word) separated by 2 to 6 all-Idle
// words. The write clock first runs 0.8 % faster than the read clock, so
// the FIFO must delete Idle words, then 0.8 % slower, so that it must
// insert them. The test checks that the read stream with filler words
// taken out equals the written stream with filler words taken out, that
// deletions and insertions both happened, that neither overflow nor
// underflow occurred, and that a filler word is never put out inside a
// frame.
module tb_xaui_rate_match;
  import xaui_pkg::*;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  logic [63:0] wdata, rdata; logic [7:0] wctrl, rctrl;
  logic del, ovf, ins, unf;
  int checks = 0, failures = 0;
  real wper = 3.175;

  xaui_rate_match dut (.wclk, .wrst, .wdata, .wctrl, .del, .ovf, .rclk, .rrst, .rdata, .rctrl, .ins, .unf);

  always #(wper) wclk = ~wclk;
  always #3.2 rclk = ~rclk;

  initial begin
    #400000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic is_filler(input logic [63:0] d, input logic [7:0] c);
    return (c == 8'hFF && d == {8{XGMII_IDLE}}) || (c == 8'h11 && d == {2{8'h01, 8'h00, 8'h00, XGMII_SEQ}});
  endfunction

  logic [71:0] expq [$];
  int n_del = 0, n_ins = 0, n_ovf = 0, n_unf = 0, n_words = 0;
  logic in_frame = 0;
  logic running = 1;

  // stimulus on the write clock
  int unsigned cnt = 0;
  int left = 0, gap = 4;
  always @(posedge wclk) begin
    if (wrst) begin
      wdata <= {8{XGMII_IDLE}}; wctrl <= 8'hFF;
    end else begin
      logic [63:0] d; logic [7:0] c;
      if (gap > 0) begin
        d = {8{XGMII_IDLE}}; c = 8'hFF; gap--;
        if (gap == 0) left = running ? 3 + $urandom % 38 : 0;
      end else if (left > 0) begin
        if (left == 1) begin d = {{7{XGMII_IDLE}}, XGMII_TERM}; c = 8'hFF; gap = 2 + $urandom % 5; end
        else begin
          cnt++;
          d = {cnt, ~cnt}; c = 8'h00;
          if (left > 2 && $urandom % 8 == 0) begin d[7:0] = XGMII_START; c = 8'h01; end
        end
        left--;
      end else begin d = {8{XGMII_IDLE}}; c = 8'hFF; end
      wdata <= d; wctrl <= c;
      if (!is_filler(d, c)) expq.push_back({c, d});
    end
    if (!wrst) begin
      if (del) n_del++;
      if (ovf) n_ovf++;
    end
  end

  // check on the read clock
  always @(posedge rclk) if (!rrst) begin
    if (ins) n_ins++;
    if (unf) n_unf++;
    if (!is_filler(rdata, rctrl)) begin
      checks++; n_words++;
      if (expq.size() == 0 || expq[0] != {rctrl, rdata}) begin
        failures++;
        if (failures < 10) $display("FAIL word %0d: got %h/%h", n_words, rctrl, rdata);
      end
      if (expq.size() > 0) void'(expq.pop_front());
      in_frame <= !(rctrl == 8'hFF && rdata[7:0] == XGMII_TERM);
    end else begin
      checks++;
      if (in_frame) begin failures++; $display("FAIL filler inside a frame"); end
    end
  end

  initial begin
    repeat (3) @(posedge rclk);
    wrst = 0; rrst = 0;
    repeat (20000) @(posedge rclk);
    wper = 3.225;
    repeat (20000) @(posedge rclk);
    running = 0;
    repeat (200) @(posedge rclk);
    checks++; if (expq.size() != 0) begin failures++; $display("FAIL %0d words not delivered", expq.size()); end
    checks++; if (n_del == 0) begin failures++; $display("FAIL no deletion"); end
    checks++; if (n_ins == 0) begin failures++; $display("FAIL no insertion"); end
    checks++; if (n_ovf != 0 || n_unf != 0) begin failures++; $display("FAIL overflow %0d underflow %0d", n_ovf, n_unf); end
    checks++; if (n_words < 20000) begin failures++; $display("FAIL only %0d words", n_words); end
    $display("rate match: deleted=%0d inserted=%0d words=%0d", n_del, n_ins, n_words);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
