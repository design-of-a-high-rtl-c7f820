// Dynamic reconfiguration controller (the XAUI_RECONFIG block).
// It serves the two transceivers XAUI0 (logical channels 0-3) and XAUI1
// (channels 4-7) over one shared reconfig_to_xcvr bus and reads each back
// on its own reconfig_from_xcvr bus.
// After reset it resets the transceivers' reconfiguration ports, starts
// offset cancellation, which every receiver needs before use, and keeps
// reconfig_busy high until both transceivers report it done.
// Then it accepts Analog Controls requests. lmpi_write_all (one clock)
// writes the lmpi_tx_vodctrl, lmpi_tx_preemp, lmpi_rx_eqctrl and
// lmpi_rx_eqdcgain values into the channel lmpi_channel_address, the
// transmitter part, the receiver part or both as lmpi_rx_tx_duplex_sel says.
// lmpi_read (one clock) reads that channel's settings back; they appear on
// rd_* in the same codes as the write inputs, with data_valid high for one
// clock. The input codes are those of the source's Table 3; a reserved code
// (tx_vodctrl 3'b011, tx_preemp not in the table, rx_eqdcgain 2'b11,
// duplex 2'b11), a request while busy, or no acknowledge from the
// transceiver within ACK_TIMEOUT clocks sets reconfig_error, which stays set
// until the next request that is accepted. A request is translated to
// transceiver setting numbers (address translation), packed into a
// FRAME_BITS frame and shifted out LSB first (parallel to serial
// converter, one bit per clock), so a write takes FRAME_BITS + 2 clocks
// plus the acknowledge; busy is high throughout. The frame format and the
// busy during writes are this design's choices.
module xaui_reconfig
  import xaui_pkg::*;
#(
  parameter int unsigned CHANNELS    = 8,   // channels controlled: 2 XAUI x 4 lanes
  parameter int unsigned ACK_TIMEOUT = 8
) (
  input  logic                        reconfig_clk,
  input  logic                        rst,                 // asynchronous, active high
  input  logic [1:0]                  lmpi_rx_eqdcgain,
  input  logic [1:0]                  lmpi_rx_eqctrl,
  input  logic [4:0]                  lmpi_tx_preemp,
  input  logic [2:0]                  lmpi_tx_vodctrl,
  input  logic [1:0]                  lmpi_rx_tx_duplex_sel,
  input  logic                        lmpi_write_all,
  input  logic                        lmpi_read,
  input  logic [$clog2(CHANNELS)-1:0] lmpi_channel_address,
  output logic [3:0]                  reconfig_to_xcvr,
  output logic                        reconfig_error,
  output logic                        reconfig_busy,
  input  logic [16:0]                 xaui0_reconfig_from_xcvr,
  input  logic [16:0]                 xaui1_reconfig_from_xcvr,
  output logic [2:0]                  rd_tx_vodctrl,
  output logic [4:0]                  rd_tx_preemp,
  output logic [1:0]                  rd_rx_eqctrl,
  output logic [1:0]                  rd_rx_eqdcgain,
  output logic                        data_valid
);
  typedef enum logic [2:0] {S_RESET, S_OC_START, S_OC_WAIT, S_IDLE, S_SHIFT, S_ACK} state_t;
  state_t state;

  frame_t               sh;
  logic [4:0]           bitcnt;
  logic [3:0]           wait_cnt;
  logic                 rd_op;
  logic                 xaui_idx;     // which transceiver the request is for
  logic [16:0]          from;
  logic                 req, legal;
  logic [2:0]           preemp_set;
  logic                 preemp_ok;
  analog_t              setting;

  // Table 3 code of tx_preemp -> setting number 0..6
  always_comb begin
    preemp_ok = 1'b1;
    case (lmpi_tx_preemp)
      5'b00000: preemp_set = 3'd0;
      5'b00001: preemp_set = 3'd1;
      5'b00101: preemp_set = 3'd2;
      5'b01001: preemp_set = 3'd3;
      5'b01101: preemp_set = 3'd4;
      5'b10001: preemp_set = 3'd5;
      5'b10101: preemp_set = 3'd6;
      default: begin preemp_set = 3'd0; preemp_ok = 1'b0; end
    endcase
    setting = '{vod: lmpi_tx_vodctrl, preemp: preemp_set, eqctrl: lmpi_rx_eqctrl,
                dcgain: lmpi_rx_eqdcgain};
    // only the fields of the part being written must be legal
    legal = (lmpi_rx_tx_duplex_sel != 2'b11);
    if (lmpi_write_all && lmpi_rx_tx_duplex_sel != 2'b01)
      legal = legal && preemp_ok && (lmpi_tx_vodctrl != 3'b011);
    if (lmpi_write_all && lmpi_rx_tx_duplex_sel != 2'b10)
      legal = legal && (lmpi_rx_eqdcgain != 2'b11);
  end

  assign req  = lmpi_write_all || lmpi_read;
  assign from = xaui_idx ? xaui1_reconfig_from_xcvr : xaui0_reconfig_from_xcvr;

  always_ff @(posedge reconfig_clk or posedge rst) begin
    if (rst) begin
      state            <= S_RESET;
      sh               <= '0;
      bitcnt           <= '0;
      wait_cnt         <= '0;
      rd_op            <= 1'b0;
      xaui_idx         <= 1'b0;
      reconfig_to_xcvr <= 4'b0000;
      reconfig_error   <= 1'b0;
      rd_tx_vodctrl    <= 3'd4;
      rd_tx_preemp     <= '0;
      rd_rx_eqctrl     <= '0;
      rd_rx_eqdcgain   <= '0;
      data_valid       <= 1'b0;
    end else begin
      reconfig_to_xcvr <= 4'b0000;
      data_valid       <= 1'b0;
      case (state)
        S_RESET: begin
          reconfig_to_xcvr[TO_RST] <= 1'b1;
          state <= S_OC_START;
        end
        S_OC_START: begin
          reconfig_to_xcvr[TO_OC] <= 1'b1;
          wait_cnt <= '0;
          state <= S_OC_WAIT;
        end
        S_OC_WAIT: begin
          // the done flags drop one clock after the start pulse
          if (wait_cnt < 4'd3) wait_cnt <= wait_cnt + 1'b1;
          else if (xaui0_reconfig_from_xcvr[10] && xaui1_reconfig_from_xcvr[10]) state <= S_IDLE;
          if (req) reconfig_error <= 1'b1;
        end
        S_IDLE: begin
          if (req) begin
            if (!legal || (lmpi_write_all && lmpi_read)) reconfig_error <= 1'b1;
            else begin
              reconfig_error <= 1'b0;
              sh <= '{set: setting, duplex: lmpi_rx_tx_duplex_sel,
                      chan: 3'(lmpi_channel_address), write: lmpi_write_all};
              rd_op    <= lmpi_read;
              xaui_idx <= lmpi_channel_address[$clog2(CHANNELS)-1];
              bitcnt   <= '0;
              state    <= S_SHIFT;
            end
          end
        end
        S_SHIFT: begin
          reconfig_to_xcvr[TO_FRAME] <= 1'b1;
          reconfig_to_xcvr[TO_SDATA] <= sh[0];
          sh <= frame_t'({1'b0, sh[FRAME_BITS-1:1]});
          bitcnt <= bitcnt + 1'b1;
          wait_cnt <= '0;
          if (bitcnt == 5'(FRAME_BITS - 1)) state <= S_ACK;
          if (req) reconfig_error <= 1'b1;
        end
        S_ACK: begin
          if (req) reconfig_error <= 1'b1;
          if (from[11]) begin
            if (rd_op) begin
              rd_tx_vodctrl  <= from[9:7];
              rd_tx_preemp   <= (from[6:4] == 3'd0) ? 5'd0 : 5'({from[6:4] - 3'd1, 2'b01});
              rd_rx_eqctrl   <= from[3:2];
              rd_rx_eqdcgain <= from[1:0];
              data_valid     <= 1'b1;
            end
            state <= S_IDLE;
          end else if (wait_cnt == 4'(ACK_TIMEOUT)) begin
            reconfig_error <= 1'b1;
            state <= S_IDLE;
          end else wait_cnt <= wait_cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign reconfig_busy = (state != S_IDLE);

  // a request is one clock long and write and read are not asked together
  property p_req_pulse;
    @(posedge reconfig_clk) disable iff (rst) req |=> !req;
  endproperty
  assert property (p_req_pulse);
endmodule
