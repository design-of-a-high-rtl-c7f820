// One four-lane XAUI transceiver (the role of an XAUI0/XAUI1 instance).
// XGMII side (xgmii_clk domain): 64-bit transmit and receive buses feed the
// XGXS transmit path and come from the receive path. Lane side: tx_lane and
// rx_lane are the 20-bit parallel words at the boundary of the analog PMA
// (serialiser, CDR, deserialiser), which is outside this design. With
// xgmii_loop set the transmit words are looped into the receiver at that
// boundary (the serial loopback of the source's Figure 4).
// The receive path runs on rx_clk, the clock the CDR recovers from the
// lanes; a rate-match FIFO carries its XGMII words into xgmii_clk and
// absorbs the frequency offset. In loopback the CDR locks to the local
// transmitter, so rx_clk must then be xgmii_clk (the looped words are
// taken without a clock crossing).
// Reconfiguration side (reconfig_clk domain): a frame of FRAME_BITS bits
// arrives LSB first on reconfig_to_xcvr[0] while reconfig_to_xcvr[1] is
// high. A frame whose logical channel lies in BASE_CH..BASE_CH+3 is taken
// by this transceiver: a write updates the Analog Controls settings of that
// channel (TX settings, RX settings or both, by the duplex field), a read
// only selects the channel; either is acknowledged by a one-clock pulse.
// A pulse on reconfig_to_xcvr[2] starts offset cancellation, which
// calibrates one receiver after the other for OC_CYCLES clocks each.
// reconfig_from_xcvr: [9:0] settings of the selected channel, [10] offset
// cancellation done, [11] acknowledge, [15:12] offset cancellation done per
// channel, [16] a frame of wrong length was dropped.
// The settings are presented to the PMA on pma_set; their analog effect,
// and the calibration itself, are not modelled. The serial protocol is this
// design's own; the vendor's one is not published in the source.
module xaui_xcvr
  import xaui_pkg::*;
#(
  parameter int unsigned BASE_CH   = 0,   // first logical channel
  parameter int unsigned OC_CYCLES = 32,  // clocks of offset cancellation per channel
  parameter int unsigned A_PERIOD  = 16
) (
  input  logic                   xgmii_clk,
  input  logic                   xgmii_rst,
  input  logic [63:0]            xgmii_txd,
  input  logic [7:0]             xgmii_txc,
  output logic [63:0]            xgmii_rxd,
  output logic [7:0]             xgmii_rxc,
  output logic [LANES-1:0][19:0] tx_lane,
  input  logic                   rx_clk,       // recovered clock of rx_lane
  input  logic                   rx_rst,       // reset synchronised to rx_clk
  input  logic [LANES-1:0][19:0] rx_lane,
  input  logic                   xgmii_loop,   // asynchronous level
  output logic [LANES-1:0]       lane_sync,
  output logic                   align,
  output logic                   align_event,
  output logic                   code_err,
  input  logic                   reconfig_clk,
  input  logic                   reconfig_rst,
  input  logic [3:0]             reconfig_to_xcvr,
  output logic [16:0]            reconfig_from_xcvr,
  output analog_t [LANES-1:0]    pma_set
);
  // ---------------- data path ----------------
  logic                   loop_s, a_sent;
  logic [LANES-1:0][19:0] rx_in;
  logic [LANES-1:0]       realigned;
  logic [63:0]            rx_d;
  logic [7:0]             rx_c;
  logic                   rm_del, rm_ovf, rm_ins, rm_unf;

  xaui_sync #(.WIDTH(1)) u_loop_sync (.clk(rx_clk), .rst(rx_rst), .d(xgmii_loop), .q(loop_s));

  xaui_tx_pcs #(.A_PERIOD(A_PERIOD)) u_tx (
    .clk(xgmii_clk), .rst(xgmii_rst), .xgmii_txd, .xgmii_txc, .tx_lane, .a_sent);

  assign rx_in = loop_s ? tx_lane : rx_lane;

  xaui_rx_pcs u_rx (
    .clk(rx_clk), .rst(rx_rst), .rx_lane(rx_in), .xgmii_rxd(rx_d), .xgmii_rxc(rx_c),
    .lane_sync, .align, .align_event, .realigned, .code_err);

  xaui_rate_match u_rm (
    .wclk(rx_clk), .wrst(rx_rst), .wdata(rx_d), .wctrl(rx_c), .del(rm_del), .ovf(rm_ovf),
    .rclk(xgmii_clk), .rrst(xgmii_rst), .rdata(xgmii_rxd), .rctrl(xgmii_rxc), .ins(rm_ins), .unf(rm_unf));

  // ---------------- reconfiguration port ----------------
  localparam int unsigned OCW = $clog2(OC_CYCLES + 1);

  frame_t             shreg;
  logic [4:0]         bitcnt;
  logic [1:0]         sel;
  logic               ack, frame_drop;
  logic               oc_run, oc_done;
  logic [1:0]         oc_ch;
  logic [OCW-1:0]     oc_cnt;
  logic [LANES-1:0]   oc_done_ch;
  logic               in_range;
  logic [2:0]         local_ch;

  assign local_ch = shreg.chan - 3'(BASE_CH);
  assign in_range = (shreg.chan >= 3'(BASE_CH)) && (shreg.chan <= 3'(BASE_CH + LANES - 1));

  always_ff @(posedge reconfig_clk or posedge reconfig_rst) begin
    if (reconfig_rst) begin
      shreg      <= '0;
      bitcnt     <= '0;
      sel        <= '0;
      ack        <= 1'b0;
      frame_drop <= 1'b0;
      oc_run     <= 1'b0;
      oc_done    <= 1'b0;
      oc_ch      <= '0;
      oc_cnt     <= '0;
      oc_done_ch <= '0;
      for (int i = 0; i < LANES; i++) pma_set[i] <= ANALOG_DEFAULT;
    end else begin
      ack <= 1'b0;
      if (reconfig_to_xcvr[TO_RST]) begin
        bitcnt <= '0;
        frame_drop <= 1'b0;
      end else if (reconfig_to_xcvr[TO_FRAME]) begin
        shreg  <= {reconfig_to_xcvr[TO_SDATA], shreg[FRAME_BITS-1:1]};
        bitcnt <= bitcnt + 1'b1;
      end else if (bitcnt != '0) begin
        bitcnt <= '0;
        if (bitcnt != 5'(FRAME_BITS)) frame_drop <= 1'b1;
        else if (in_range && !oc_run) begin
          sel <= local_ch[1:0];
          ack <= 1'b1;
          if (shreg.write) begin
            if (shreg.duplex != 2'b01) begin   // transmitter part
              pma_set[local_ch[1:0]].vod    <= shreg.set.vod;
              pma_set[local_ch[1:0]].preemp <= shreg.set.preemp;
            end
            if (shreg.duplex != 2'b10) begin   // receiver part
              pma_set[local_ch[1:0]].eqctrl <= shreg.set.eqctrl;
              pma_set[local_ch[1:0]].dcgain <= shreg.set.dcgain;
            end
          end
        end
      end
      // offset cancellation sequencing
      if (reconfig_to_xcvr[TO_OC]) begin
        oc_run     <= 1'b1;
        oc_done    <= 1'b0;
        oc_ch      <= '0;
        oc_cnt     <= '0;
        oc_done_ch <= '0;
      end else if (oc_run) begin
        if (oc_cnt == OCW'(OC_CYCLES - 1)) begin
          oc_cnt <= '0;
          oc_done_ch[oc_ch] <= 1'b1;
          oc_ch <= oc_ch + 1'b1;
          if (oc_ch == 2'(LANES - 1)) begin
            oc_run  <= 1'b0;
            oc_done <= 1'b1;
          end
        end else oc_cnt <= oc_cnt + 1'b1;
      end
    end
  end

  assign reconfig_from_xcvr = {frame_drop, oc_done_ch, ack, oc_done, pma_set[sel]};
endmodule
