// XGXS receive path (IEEE 802.3ae clause 48) of one XAUI port.
// Four lanes of 20-bit words (two code groups per clock, bit 0 first) pass
// through a word aligner per lane, two 8B/10B decoders per lane and the
// lane deskew, and are mapped back onto the 64-bit XGMII receive bus
// (column 0 in rxd[31:0]). Mapping: /K/, /A/ and /R/ become Idle (07),
// /S/, /T/, /E/ and /Q/ become FB, FD, FE and 9C with the control bit set,
// an invalid code group becomes Error (FE), data code groups pass as data.
// Until the lanes are deskewed the output carries the Local Fault ordered
// set (9C 00 00 01 in lanes 0-3), as clause 48 prescribes. Latency: 3 clocks
// (aligner, deskew, output register) plus the deskew delay of the lane.
module xaui_rx_pcs
  import xaui_pkg::*;
(
  input  logic                   clk,
  input  logic                   rst,        // asynchronous, active high
  input  logic [LANES-1:0][19:0] rx_lane,
  output logic [63:0]            xgmii_rxd,
  output logic [7:0]             xgmii_rxc,
  output logic [LANES-1:0]       lane_sync,
  output logic                   align,
  output logic                   align_event, // pulse: lanes (re)deskewed
  output logic [LANES-1:0]       realigned,   // pulse per lane: word position moved
  output logic                   code_err     // pulse: an invalid code group
);
  logic [LANES-1:0][19:0]    aligned_w;
  sym_t [LANES-1:0][1:0]     dec, dsk;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    xaui_word_aligner u_wa (.clk, .rst, .din(rx_lane[i]), .dout(aligned_w[i]),
                            .cg_err(dec[i][0].err || dec[i][1].err),
                            .sync(lane_sync[i]), .realigned(realigned[i]));
    for (genvar c = 0; c < 2; c++) begin : g_cg
      xaui_dec8b10b u_dec (.din(aligned_w[i][10*c +: 10]), .dout(dec[i][c].d),
                           .k(dec[i][c].k), .err(dec[i][c].err));
    end
  end

  xaui_deskew u_dsk (.clk, .rst, .lane_sync, .din(dec), .dout(dsk), .aligned(align),
                     .align_event);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      xgmii_rxd <= {2{8'h01, 8'h00, 8'h00, XGMII_SEQ}};
      xgmii_rxc <= 8'h11;
      code_err  <= 1'b0;
    end else begin
      code_err <= 1'b0;
      for (int c = 0; c < 2; c++)
        for (int i = 0; i < LANES; i++) begin
          if (!align) begin
            xgmii_rxc[4*c+i]         <= (i == 0);
            xgmii_rxd[32*c+8*i +: 8] <= (i == 0) ? XGMII_SEQ : (i == 3) ? 8'h01 : 8'h00;
          end else if (dsk[i][c].err) begin
            xgmii_rxc[4*c+i]         <= 1'b1;
            xgmii_rxd[32*c+8*i +: 8] <= XGMII_ERROR;
            code_err                 <= 1'b1;
          end else if (dsk[i][c].k) begin
            xgmii_rxc[4*c+i]         <= 1'b1;
            xgmii_rxd[32*c+8*i +: 8] <= (dsk[i][c].d == K28_5 || dsk[i][c].d == K28_3 || dsk[i][c].d == K28_0) ? XGMII_IDLE :
                                        (dsk[i][c].d == K27_7 || dsk[i][c].d == K29_7 || dsk[i][c].d == K30_7 || dsk[i][c].d == K28_4) ? dsk[i][c].d :
                                        XGMII_ERROR;
          end else begin
            xgmii_rxc[4*c+i]         <= 1'b0;
            xgmii_rxd[32*c+8*i +: 8] <= dsk[i][c].d;
          end
        end
    end
  end
endmodule
