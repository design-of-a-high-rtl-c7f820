// Self-checking test of the LMPI register interface. It checks the reset
// values (VOD 4, pre-emphasis, equalisation and DC gain 0), write and read
// back of every read/write register, that chip select gates both writes and
// reads, the one-clock write_all and read pulses of the CMD register, the
// status bits (busy, error, xaui_sel, read-data valid cleared by reading
// READBACK), the capture of read-back data, the transceiver status
// registers and the read latency of one clock.
module tb_xaui_lmpi;
  logic clk = 0, rst = 1;
  logic cs = 0, wen = 0, ren = 0;
  logic [7:0] addr = 0; logic [15:0] data = 0, rdata;
  logic [1:0] eq, dc, dup; logic [4:0] pre; logic [2:0] vod, ch;
  logic wa, rd;
  logic err = 0, busy = 0, dv = 0, sel = 0;
  logic [2:0] r_vod = 0; logic [4:0] r_pre = 0; logic [1:0] r_eq = 0, r_dc = 0;
  logic [3:0] loop; logic [4:0] s0 = 0, s1 = 0;
  int checks = 0, failures = 0, wa_pulses = 0, rd_pulses = 0;

  xaui_lmpi dut (.clk, .rst, .gmpi_xaui_cs(cs), .gmpi_addr(addr), .gmpi_data(data), .gmpi_wen(wen),
    .gmpi_ren(ren), .gmpi_rdata(rdata), .lmpi_rx_eqctrl(eq), .lmpi_rx_eqdcgain(dc),
    .lmpi_rx_tx_duplex_sel(dup), .lmpi_tx_preemp(pre), .lmpi_tx_vodctrl(vod),
    .lmpi_write_all(wa), .lmpi_read(rd), .lmpi_channel_address(ch), .reconfig_error(err),
    .reconfig_busy(busy), .rd_tx_vodctrl(r_vod), .rd_tx_preemp(r_pre), .rd_rx_eqctrl(r_eq),
    .rd_rx_eqdcgain(r_dc), .data_valid(dv), .xgmii_loop(loop), .xaui0_status(s0),
    .xaui1_status(s1), .xaui_sel(sel));
  always #5 clk = ~clk;
  always @(posedge clk) if (!rst) begin
    if (wa) wa_pulses++;
    if (rd) rd_pulses++;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ck(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [15:0] d, input logic c = 1);
    @(negedge clk); cs = c; addr = a; data = d; wen = 1;
    @(negedge clk); cs = 0; wen = 0;
  endtask
  task automatic rdreg(input logic [7:0] a, output logic [15:0] d, input logic c = 1);
    @(negedge clk); cs = c; addr = a; ren = 1;
    @(negedge clk); cs = 0; ren = 0; d = rdata;   // one clock after ren
  endtask

  initial begin
    logic [15:0] v;
    repeat (2) @(negedge clk);
    rst = 0;
    ck(vod == 4 && pre == 0 && eq == 0 && dc == 0 && ch == 0 && dup == 0 && loop == 0, "reset values");
    rdreg(8'h04, v); ck(v == 4, "VOD reads 4 after reset");
    wr(8'h00, 16'hA55A); rdreg(8'h00, v); ck(v == 16'hA55A, "scratch");
    wr(8'h00, 16'h1234, 0); rdreg(8'h00, v); ck(v == 16'hA55A, "write without chip select ignored");
    rdreg(8'h04, v, 0); ck(v == 16'hA55A, "read without chip select ignored");
    wr(8'h02, 16'hFFFD); ck(ch == 3'd5, "channel"); rdreg(8'h02, v); ck(v == 5, "channel read");
    wr(8'h03, 16'h0002); ck(dup == 2'b10, "duplex"); rdreg(8'h03, v); ck(v == 2, "duplex read");
    wr(8'h04, 16'h0007); ck(vod == 7, "vod"); rdreg(8'h04, v); ck(v == 7, "vod read");
    wr(8'h05, 16'h0015); ck(pre == 5'b10101, "preemp"); rdreg(8'h05, v); ck(v == 16'h15, "preemp read");
    wr(8'h06, 16'h0003); ck(eq == 3, "eqctrl"); rdreg(8'h06, v); ck(v == 3, "eqctrl read");
    wr(8'h07, 16'h0002); ck(dc == 2, "dcgain"); rdreg(8'h07, v); ck(v == 2, "dcgain read");
    wr(8'h0A, 16'h0005); ck(loop == 4'b0101, "loop"); rdreg(8'h0A, v); ck(v == 5, "loop read");
    // command pulses
    wr(8'h01, 16'h0001); @(negedge clk);
    ck(wa_pulses == 1 && rd_pulses == 0 && !wa, "write_all one-clock pulse");
    wr(8'h01, 16'h0002); @(negedge clk);
    ck(wa_pulses == 1 && rd_pulses == 1 && !rd, "read one-clock pulse");
    rdreg(8'h01, v); ck(v == 0, "CMD reads 0");
    // status
    busy = 1; err = 0; sel = 1; rdreg(8'h08, v); ck(v == 16'b1001, "status busy, xaui_sel");
    busy = 0; err = 1; sel = 0; rdreg(8'h08, v); ck(v == 16'b0010, "status error");
    // read-back capture
    @(negedge clk); r_vod = 3'd6; r_pre = 5'b01101; r_eq = 2'd1; r_dc = 2'd2; dv = 1;
    @(negedge clk); dv = 0; r_vod = 0; r_pre = 0; r_eq = 0; r_dc = 0;
    rdreg(8'h08, v); ck(v[2], "read data valid");
    rdreg(8'h09, v); ck(v == {4'b0, 2'd2, 2'd1, 5'b01101, 3'd6}, $sformatf("readback %h", v));
    rdreg(8'h08, v); ck(!v[2], "valid cleared by reading READBACK");
    s0 = 5'b10110; s1 = 5'b01111;
    rdreg(8'h0B, v); ck(v == 16'b10110, "XAUI0 status");
    rdreg(8'h0C, v); ck(v == 16'b01111, "XAUI1 status");
    rdreg(8'h3F, v); ck(v == 0, "unmapped address reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
