// Second-level microprocessor interface (the XAUI_LMPI block).
// A simple synchronous register bus from the board processor (gmpi_*):
// with gmpi_xaui_cs high, gmpi_wen for one clock writes gmpi_data into the
// register at gmpi_addr, gmpi_ren for one clock reads it; the read data
// appears on gmpi_rdata one clock later and is held. The registers drive
// the Analog Controls inputs of the reconfiguration controller, start its
// write and read transactions, and give the status of the controller and of
// both transceivers. The source names the bus signals and the controls but
// gives no register map; the map below is this design's own.
//   0x00 SCRATCH    r/w  [15:0] free register for bus tests
//   0x01 CMD        w    [0] write_all pulse, [1] read pulse (reads 0)
//   0x02 CHANNEL    r/w  [2:0] lmpi_channel_address
//   0x03 DUPLEX     r/w  [1:0] lmpi_rx_tx_duplex_sel
//   0x04 VODCTRL    r/w  [2:0] lmpi_tx_vodctrl, reset 4
//   0x05 PREEMP     r/w  [4:0] lmpi_tx_preemp, reset 0
//   0x06 EQCTRL     r/w  [1:0] lmpi_rx_eqctrl, reset 0
//   0x07 EQDCGAIN   r/w  [1:0] lmpi_rx_eqdcgain, reset 0
//   0x08 STATUS     r    [0] reconfig_busy, [1] reconfig_error,
//                        [2] read data valid (cleared by reading 0x09),
//                        [3] xaui_sel
//   0x09 READBACK   r    [2:0] vodctrl, [7:3] preemp, [9:8] eqctrl,
//                        [11:10] eqdcgain of the last lmpi_read
//   0x0A LOOP       r/w  [3:0] xgmii_loop (bit 0 XAUI0, bit 2 XAUI1)
//   0x0B XAUI0_STAT r    [3:0] lane sync, [4] lanes aligned
//   0x0C XAUI1_STAT r    [3:0] lane sync, [4] lanes aligned
// Other addresses read 0. The reset values of 0x04-0x07 are the default
// Analog Controls settings the source gives.
module xaui_lmpi (
  input  logic        clk,
  input  logic        rst,               // asynchronous, active high
  input  logic        gmpi_xaui_cs,
  input  logic [7:0]  gmpi_addr,
  input  logic [15:0] gmpi_data,
  input  logic        gmpi_wen,
  input  logic        gmpi_ren,
  output logic [15:0] gmpi_rdata,
  output logic [1:0]  lmpi_rx_eqctrl,
  output logic [1:0]  lmpi_rx_eqdcgain,
  output logic [1:0]  lmpi_rx_tx_duplex_sel,
  output logic [4:0]  lmpi_tx_preemp,
  output logic [2:0]  lmpi_tx_vodctrl,
  output logic        lmpi_write_all,
  output logic        lmpi_read,
  output logic [2:0]  lmpi_channel_address,
  input  logic        reconfig_error,
  input  logic        reconfig_busy,
  input  logic [2:0]  rd_tx_vodctrl,
  input  logic [4:0]  rd_tx_preemp,
  input  logic [1:0]  rd_rx_eqctrl,
  input  logic [1:0]  rd_rx_eqdcgain,
  input  logic        data_valid,
  output logic [3:0]  xgmii_loop,
  input  logic [4:0]  xaui0_status,      // synchronised {align, lane_sync}
  input  logic [4:0]  xaui1_status,
  input  logic        xaui_sel
);
  typedef enum logic [7:0] {
    A_SCRATCH = 8'h00, A_CMD = 8'h01, A_CHANNEL = 8'h02, A_DUPLEX = 8'h03,
    A_VOD = 8'h04, A_PREEMP = 8'h05, A_EQ = 8'h06, A_DCGAIN = 8'h07,
    A_STATUS = 8'h08, A_READBACK = 8'h09, A_LOOP = 8'h0A,
    A_X0STAT = 8'h0B, A_X1STAT = 8'h0C
  } addr_t;

  logic [15:0] scratch;
  logic        rd_valid;
  logic [11:0] readback;
  logic        wr, rd;

  assign wr = gmpi_xaui_cs && gmpi_wen;
  assign rd = gmpi_xaui_cs && gmpi_ren;

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      scratch               <= '0;
      lmpi_channel_address  <= '0;
      lmpi_rx_tx_duplex_sel <= '0;
      lmpi_tx_vodctrl       <= 3'd4;
      lmpi_tx_preemp        <= '0;
      lmpi_rx_eqctrl        <= '0;
      lmpi_rx_eqdcgain      <= '0;
      lmpi_write_all        <= 1'b0;
      lmpi_read             <= 1'b0;
      xgmii_loop            <= '0;
      rd_valid              <= 1'b0;
      readback              <= '0;
      gmpi_rdata            <= '0;
    end else begin
      lmpi_write_all <= 1'b0;
      lmpi_read      <= 1'b0;
      if (data_valid) begin
        rd_valid <= 1'b1;
        readback <= {rd_rx_eqdcgain, rd_rx_eqctrl, rd_tx_preemp, rd_tx_vodctrl};
      end
      if (wr) begin
        case (gmpi_addr)
          A_SCRATCH: scratch               <= gmpi_data;
          A_CMD: begin
            lmpi_write_all <= gmpi_data[0];
            lmpi_read      <= gmpi_data[1];
          end
          A_CHANNEL: lmpi_channel_address  <= gmpi_data[2:0];
          A_DUPLEX:  lmpi_rx_tx_duplex_sel <= gmpi_data[1:0];
          A_VOD:     lmpi_tx_vodctrl       <= gmpi_data[2:0];
          A_PREEMP:  lmpi_tx_preemp        <= gmpi_data[4:0];
          A_EQ:      lmpi_rx_eqctrl        <= gmpi_data[1:0];
          A_DCGAIN:  lmpi_rx_eqdcgain      <= gmpi_data[1:0];
          A_LOOP:    xgmii_loop            <= gmpi_data[3:0];
          default: ;
        endcase
      end
      if (rd) begin
        case (gmpi_addr)
          A_SCRATCH:  gmpi_rdata <= scratch;
          A_CHANNEL:  gmpi_rdata <= 16'(lmpi_channel_address);
          A_DUPLEX:   gmpi_rdata <= 16'(lmpi_rx_tx_duplex_sel);
          A_VOD:      gmpi_rdata <= 16'(lmpi_tx_vodctrl);
          A_PREEMP:   gmpi_rdata <= 16'(lmpi_tx_preemp);
          A_EQ:       gmpi_rdata <= 16'(lmpi_rx_eqctrl);
          A_DCGAIN:   gmpi_rdata <= 16'(lmpi_rx_eqdcgain);
          A_STATUS:   gmpi_rdata <= 16'({xaui_sel, rd_valid, reconfig_error, reconfig_busy});
          A_READBACK: begin
            gmpi_rdata <= 16'(readback);
            if (!data_valid) rd_valid <= 1'b0;
          end
          A_LOOP:     gmpi_rdata <= 16'(xgmii_loop);
          A_X0STAT:   gmpi_rdata <= 16'(xaui0_status);
          A_X1STAT:   gmpi_rdata <= 16'(xaui1_status);
          default:    gmpi_rdata <= '0;
        endcase
      end
    end
  end

  // the processor never reads and writes in the same clock
  property p_no_rw;
    @(posedge clk) disable iff (rst) !(wr && rd);
  endproperty
  assert property (p_no_rw);
endmodule
