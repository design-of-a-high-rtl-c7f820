// High speed XAUI with 1+1 protection: the top level.
// One XGMII transmit stream (64-bit, two 32-bit columns per xgmii_clk) is
// sent on two XAUI ports at once, XAUI0 (the working channel) and XAUI1
// (the protection channel). Each port is a four-lane transceiver
// (xaui_xcvr) whose receive side returns its own 64-bit XGMII stream,
// brought out as xaui0_xgmii_rx* and xaui1_xgmii_rx*; xaui_sel picks which
// of the two drives xgmii_rxd/xgmii_rxc (0 XAUI0, 1 XAUI1), so the
// receiver switches to the protection channel when the working one fails.
// The board processor reaches the design through XAUI_LMPI (register bus on
// phy_mgmt_clk), which drives XAUI_RECONFIG, the dynamic reconfiguration
// controller. That controller runs offset cancellation after reset and
// writes or reads the Analog Controls settings (VOD, pre-emphasis,
// equalisation, DC gain) of any of the eight channels over the shared
// reconfig_to_xcvr bus; each port answers on its own reconfig_from_xcvr.
// LMPI also sets the serial loopback of each port (xgmii_loop bit 0 for
// XAUI0, bit 2 for XAUI1, as in the source's Figure 4) and reads the lane
// sync and alignment status of both ports.
// The analog PMA is outside the design: the 20-bit lane words
// xaui*_tx_lane / xaui*_rx_lane and the settings xaui*_pma_set are its
// interface. Clocks: phy_mgmt_clk for management and reconfiguration,
// xgmii_clk (156.25 MHz in a real link) for the transmit path and the
// XGMII receive buses, and xaui0_rx_clk / xaui1_rx_clk, the clocks the
// PMA recovers from each port's lanes, for the receive paths up to their
// rate-match FIFOs; rst is the global asynchronous reset, synchronised
// into each clock domain.
// Ports beyond the source's Table 2 (transmit XGMII, xgmii_clk, gmpi_rdata,
// the selected receive bus and the PMA-side signals and recovered clocks) are this design's.
module xaui_top
  import xaui_pkg::*;
#(
  parameter int unsigned OC_CYCLES = 32,
  parameter int unsigned A_PERIOD  = 16
) (
  input  logic                   phy_mgmt_clk,
  input  logic                   rst,
  input  logic                   gmpi_xaui_cs,
  input  logic [7:0]             gmpi_addr,
  input  logic [15:0]            gmpi_data,
  input  logic                   gmpi_wen,
  input  logic                   gmpi_ren,
  output logic [15:0]            gmpi_rdata,
  input  logic                   xaui_sel,
  input  logic                   xgmii_clk,
  input  logic [63:0]            xgmii_txd,
  input  logic [7:0]             xgmii_txc,
  output logic [63:0]            xaui0_xgmii_rxd,
  output logic [7:0]             xaui0_xgmii_rxc,
  output logic [63:0]            xaui1_xgmii_rxd,
  output logic [7:0]             xaui1_xgmii_rxc,
  output logic [63:0]            xgmii_rxd,
  output logic [7:0]             xgmii_rxc,
  output logic [LANES-1:0][19:0] xaui0_tx_lane,
  input  logic                   xaui0_rx_clk,   // recovered clock of xaui0_rx_lane
  input  logic [LANES-1:0][19:0] xaui0_rx_lane,
  output logic [LANES-1:0][19:0] xaui1_tx_lane,
  input  logic                   xaui1_rx_clk,   // recovered clock of xaui1_rx_lane
  input  logic [LANES-1:0][19:0] xaui1_rx_lane,
  output analog_t [LANES-1:0]    xaui0_pma_set,
  output analog_t [LANES-1:0]    xaui1_pma_set
);
  logic mgmt_rst, xg_rst;
  xaui_rst_sync u_rst_mgmt (.clk(phy_mgmt_clk), .rst_in(rst), .rst_out(mgmt_rst));
  xaui_rst_sync u_rst_xg   (.clk(xgmii_clk),    .rst_in(rst), .rst_out(xg_rst));
  logic rx0_rst, rx1_rst;
  xaui_rst_sync u_rst_rx0  (.clk(xaui0_rx_clk), .rst_in(rst), .rst_out(rx0_rst));
  xaui_rst_sync u_rst_rx1  (.clk(xaui1_rx_clk), .rst_in(rst), .rst_out(rx1_rst));

  // LMPI <-> RECONFIG
  logic [1:0] lmpi_rx_eqctrl, lmpi_rx_eqdcgain, lmpi_rx_tx_duplex_sel;
  logic [4:0] lmpi_tx_preemp;
  logic [2:0] lmpi_tx_vodctrl, lmpi_channel_address;
  logic       lmpi_write_all, lmpi_read;
  logic       reconfig_error, reconfig_busy, data_valid;
  logic [2:0] rd_tx_vodctrl;
  logic [4:0] rd_tx_preemp;
  logic [1:0] rd_rx_eqctrl, rd_rx_eqdcgain;
  logic [3:0] reconfig_to_xcvr;
  logic [16:0] xaui0_reconfig_from_xcvr, xaui1_reconfig_from_xcvr;
  logic [3:0] xgmii_loop;

  // status crossing into the management clock
  logic [LANES-1:0] x0_sync, x1_sync;
  logic             x0_align, x1_align;
  logic [4:0]       x0_stat, x1_stat;
  logic             sel_mgmt, sel_xg;

  xaui_sync #(.WIDTH(5)) u_s0 (.clk(phy_mgmt_clk), .rst(mgmt_rst), .d({x0_align, x0_sync}), .q(x0_stat));
  xaui_sync #(.WIDTH(5)) u_s1 (.clk(phy_mgmt_clk), .rst(mgmt_rst), .d({x1_align, x1_sync}), .q(x1_stat));
  xaui_sync #(.WIDTH(1)) u_ss (.clk(phy_mgmt_clk), .rst(mgmt_rst), .d(xaui_sel), .q(sel_mgmt));
  xaui_sync #(.WIDTH(1)) u_sx (.clk(xgmii_clk),    .rst(xg_rst),   .d(xaui_sel), .q(sel_xg));

  xaui_lmpi u_lmpi (
    .clk(phy_mgmt_clk), .rst(mgmt_rst),
    .gmpi_xaui_cs, .gmpi_addr, .gmpi_data, .gmpi_wen, .gmpi_ren, .gmpi_rdata,
    .lmpi_rx_eqctrl, .lmpi_rx_eqdcgain, .lmpi_rx_tx_duplex_sel, .lmpi_tx_preemp,
    .lmpi_tx_vodctrl, .lmpi_write_all, .lmpi_read, .lmpi_channel_address,
    .reconfig_error, .reconfig_busy, .rd_tx_vodctrl, .rd_tx_preemp, .rd_rx_eqctrl,
    .rd_rx_eqdcgain, .data_valid, .xgmii_loop,
    .xaui0_status(x0_stat), .xaui1_status(x1_stat), .xaui_sel(sel_mgmt));

  xaui_reconfig #(.CHANNELS(2 * LANES)) u_reconfig (
    .reconfig_clk(phy_mgmt_clk), .rst(mgmt_rst),
    .lmpi_rx_eqdcgain, .lmpi_rx_eqctrl, .lmpi_tx_preemp, .lmpi_tx_vodctrl,
    .lmpi_rx_tx_duplex_sel, .lmpi_write_all, .lmpi_read, .lmpi_channel_address,
    .reconfig_to_xcvr, .reconfig_error, .reconfig_busy,
    .xaui0_reconfig_from_xcvr, .xaui1_reconfig_from_xcvr,
    .rd_tx_vodctrl, .rd_tx_preemp, .rd_rx_eqctrl, .rd_rx_eqdcgain, .data_valid);

  xaui_xcvr #(.BASE_CH(0), .OC_CYCLES(OC_CYCLES), .A_PERIOD(A_PERIOD)) u_xaui0 (
    .xgmii_clk, .xgmii_rst(xg_rst), .xgmii_txd, .xgmii_txc,
    .xgmii_rxd(xaui0_xgmii_rxd), .xgmii_rxc(xaui0_xgmii_rxc),
    .tx_lane(xaui0_tx_lane), .rx_clk(xaui0_rx_clk), .rx_rst(rx0_rst), .rx_lane(xaui0_rx_lane), .xgmii_loop(xgmii_loop[0]),
    .lane_sync(x0_sync), .align(x0_align), .align_event(), .code_err(),
    .reconfig_clk(phy_mgmt_clk), .reconfig_rst(mgmt_rst), .reconfig_to_xcvr,
    .reconfig_from_xcvr(xaui0_reconfig_from_xcvr), .pma_set(xaui0_pma_set));

  xaui_xcvr #(.BASE_CH(LANES), .OC_CYCLES(OC_CYCLES), .A_PERIOD(A_PERIOD)) u_xaui1 (
    .xgmii_clk, .xgmii_rst(xg_rst), .xgmii_txd, .xgmii_txc,
    .xgmii_rxd(xaui1_xgmii_rxd), .xgmii_rxc(xaui1_xgmii_rxc),
    .tx_lane(xaui1_tx_lane), .rx_clk(xaui1_rx_clk), .rx_rst(rx1_rst), .rx_lane(xaui1_rx_lane), .xgmii_loop(xgmii_loop[2]),
    .lane_sync(x1_sync), .align(x1_align), .align_event(), .code_err(),
    .reconfig_clk(phy_mgmt_clk), .reconfig_rst(mgmt_rst), .reconfig_to_xcvr,
    .reconfig_from_xcvr(xaui1_reconfig_from_xcvr), .pma_set(xaui1_pma_set));

  // 1+1 protection: receive selection
  always_ff @(posedge xgmii_clk or posedge xg_rst) begin
    if (xg_rst) begin
      xgmii_rxd <= {8{XGMII_IDLE}};
      xgmii_rxc <= 8'hFF;
    end else begin
      xgmii_rxd <= sel_xg ? xaui1_xgmii_rxd : xaui0_xgmii_rxd;
      xgmii_rxc <= sel_xg ? xaui1_xgmii_rxc : xaui0_xgmii_rxc;
    end
  end
endmodule
