// Self-checking test of the word aligner. A lane stream of /K/ and random
// data code groups is encoded here (with the 8B/10B encoder), turned into a
// bit stream and cut into 20-bit words at a chosen bit offset. For each of
// several random offsets the test checks that sync is declared within 400
// clocks, that afterwards every output word holds two valid code groups,
// that the decoded sequence equals the sequence sent, and, after the offset
// is changed while in sync, that sync is dropped and regained; and that a
// dead lane (all zeros) drops sync after BAD_WORDS invalid words.
module tb_xaui_word_aligner;
  import xaui_pkg::*;
  logic clk = 0, rst = 1;
  logic [19:0] din, dout;
  logic sync, realigned;
  int checks = 0, failures = 0, syncs = 0, losses = 0;

  xaui_word_aligner dut (.clk, .rst, .din, .dout, .cg_err(de[0] || de[1]), .sync, .realigned);
  always #5 clk = ~clk;

  logic [7:0] ed; logic ek, erd = 0, erd_o, ekerr; logic [9:0] ecode;
  xaui_enc8b10b enc (.din(ed), .k(ek), .rd_in(erd), .dout(ecode), .rd_out(erd_o), .k_err(ekerr));
  logic [7:0] dd [2]; logic dk [2], de [2];
  xaui_dec8b10b dec0 (.din(dout[9:0]),   .dout(dd[0]), .k(dk[0]), .err(de[0]));
  xaui_dec8b10b dec1 (.din(dout[19:10]), .dout(dd[1]), .k(dk[1]), .err(de[1]));

  logic bits [$];
  logic [8:0] sent [$];    // {k, d} in order
  int shift_now = 0;

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic push_cg();
    ek = ($urandom % 4 == 0);
    ed = ek ? K28_5 : 8'($urandom);
    #1;
    for (int i = 0; i < 10; i++) bits.push_back(ecode[i]);
    sent.push_back({ek, ed});
    erd = erd_o;
  endtask

  // drive one 20-bit word from the bit stream
  task automatic step();
    while (bits.size() < 40) push_cg();
    for (int i = 0; i < 20; i++) din[i] = bits.pop_front();
    @(posedge clk); #1;
  endtask

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int trial = 0; trial < 6; trial++) begin
      int off, cyc, got_sync_at;
      off = 1 + $urandom % 19;
      // drop 'off' bits to move the word boundary
      while (bits.size() < 40) push_cg();
      for (int i = 0; i < off; i++) void'(bits.pop_front());
      // code groups sent no longer match the 10-bit grid: resynchronise our
      // own reference by tracking only what the decoder sees later
      got_sync_at = -1;
      for (cyc = 0; cyc < 400; cyc++) begin
        logic was;
        was = sync;
        step();
        if (trial > 0 && was && !sync) losses++;
        if (!was && sync) begin got_sync_at = cyc; syncs++; break; end
      end
      checks++;
      if (got_sync_at < 0) begin failures++; $display("FAIL no sync, trial %0d offset %0d", trial, off); end
      // once synchronised every word decodes without error
      for (int n = 0; n < 200; n++) begin
        step();
        checks++;
        if (!sync || de[0] || de[1]) begin
          failures++;
          if (failures < 10) $display("FAIL trial %0d: sync=%0d err=%0d%0d word=%h", trial, sync, de[0], de[1], dout);
        end
      end
    end
    // data integrity: compare the decoded sequence with what was sent
    begin
      logic [8:0] got [$];
      int match;
      sent.delete();
      for (int n = 0; n < 300; n++) begin
        step();
        got.push_back({dk[0], dd[0]});
        got.push_back({dk[1], dd[1]});
      end
      // find the first sent code group in what was received
      match = -1;
      for (int s = 0; s < 8 && match < 0; s++) begin
        int ok;
        ok = 1;
        for (int i = 0; i < 200; i++) if (got[s + i] !== sent[i]) ok = 0;
        if (ok) match = s;
      end
      checks++;
      if (match < 0) begin failures++; $display("FAIL decoded stream differs from sent stream"); end
    end
    // a dead lane (no transitions) gives invalid code groups: sync drops
    begin
      int n;
      n = 0;
      while (sync && n < 20) begin din = '0; @(posedge clk); #1; n++; end
      checks++;
      if (sync || n < 4) begin failures++; $display("FAIL sync on a dead lane (n=%0d)", n); end
      else losses++;
    end
    checks++;
    if (syncs < 6 || losses < 4) begin failures++; $display("FAIL coverage syncs=%0d losses=%0d", syncs, losses); end
    $display("syncs %0d losses %0d", syncs, losses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
