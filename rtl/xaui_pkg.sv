// Shared constants and types of the XAUI design.
// XGMII control characters and the 8B/10B special code groups used by the
// XGXS (IEEE 802.3ae clause 48), the Analog Controls settings of one
// transceiver channel, and the frame that the reconfiguration controller
// sends serially to a transceiver. The XGMII and 8B/10B values are the
// standard ones; the settings frame layout is this design's own choice.
package xaui_pkg;

  // XGMII control characters (ctrl bit = 1)
  localparam logic [7:0] XGMII_IDLE  = 8'h07;
  localparam logic [7:0] XGMII_START = 8'hFB;
  localparam logic [7:0] XGMII_TERM  = 8'hFD;
  localparam logic [7:0] XGMII_ERROR = 8'hFE;
  localparam logic [7:0] XGMII_SEQ   = 8'h9C;

  // 8B/10B special code groups, as the byte fed to the encoder with k = 1
  localparam logic [7:0] K28_0 = 8'h1C;  // /R/
  localparam logic [7:0] K28_3 = 8'h7C;  // /A/ alignment
  localparam logic [7:0] K28_4 = 8'h9C;  // /Q/ sequence
  localparam logic [7:0] K28_5 = 8'hBC;  // /K/ sync (comma)
  localparam logic [7:0] K27_7 = 8'hFB;  // /S/
  localparam logic [7:0] K29_7 = 8'hFD;  // /T/
  localparam logic [7:0] K30_7 = 8'hFE;  // /E/

  localparam int unsigned LANES = 4;     // XAUI lanes per direction

  // One decoded code group
  typedef struct packed {
    logic       err;   // invalid code group
    logic       k;     // special code group
    logic [7:0] d;     // byte
  } sym_t;

  // Analog Controls settings of one channel, as transceiver setting numbers
  typedef struct packed {
    logic [2:0] vod;     // tx_vodctrl setting 0..7 (3 unused)
    logic [2:0] preemp;  // tx_preemp setting 0..6
    logic [1:0] eqctrl;  // rx_eqctrl setting 0..3
    logic [1:0] dcgain;  // rx_eqdcgain setting 0..2 (0, 3, 6 dB)
  } analog_t;

  // Power-up settings given by the paper: vod 4, pre-emphasis 0, eq 0, dc gain 0
  localparam analog_t ANALOG_DEFAULT = '{vod: 3'd4, preemp: 3'd0, eqctrl: 2'd0, dcgain: 2'd0};

  // Frame shifted out LSB first on reconfig_to_xcvr[0]
  typedef struct packed {
    analog_t    set;     // [15:6]
    logic [1:0] duplex;  // [5:4] 00 tx+rx, 01 rx only, 10 tx only
    logic [2:0] chan;    // [3:1] logical channel, 0-3 XAUI0, 4-7 XAUI1
    logic       write;   // [0] 1 write, 0 read
  } frame_t;
  localparam int unsigned FRAME_BITS = $bits(frame_t);

  // reconfig_to_xcvr bit positions
  localparam int unsigned TO_SDATA = 0;  // serial frame data
  localparam int unsigned TO_FRAME = 1;  // high while a frame is shifted
  localparam int unsigned TO_OC    = 2;  // offset cancellation start pulse
  localparam int unsigned TO_RST   = 3;  // reconfiguration reset

endpackage
