// XGXS transmit path (IEEE 802.3ae clause 48) of one XAUI port.
// Takes the 64-bit XGMII transmit bus (two 32-bit columns per clock, column 0
// in txd[31:0] first, byte lane i of column c in txd[32c+8i +: 8], its
// control bit in txc[4c+i]) and produces four lanes of two 8B/10B code
// groups per clock. Lane word bits [9:0] carry column 0, bits [19:10]
// column 1, with bit 0 the first bit to be serialised.
// Mapping: an all-idle column becomes an ||A|| column (K28.3 on all lanes)
// once at least A_PERIOD columns have passed since the last one, otherwise
// a ||K|| column (K28.5, the comma the receiver aligns on). Inside other
// columns an idle byte becomes /K/, Start, Terminate, Error and Sequence
// become K27.7, K29.7, K30.7 and K28.4, a reserved control byte becomes
// /E/, and data bytes are data code groups. Each lane keeps its own running
// disparity. One register stage: output one clock after the XGMII input.
// Clause 48 spaces ||A|| columns randomly (16 to 31 columns) and also sends
// ||R||; this design uses the fixed spacing A_PERIOD and no ||R||.
module xaui_tx_pcs
  import xaui_pkg::*;
#(
  parameter int unsigned A_PERIOD = 16  // minimum columns between ||A|| columns
) (
  input  logic                  clk,
  input  logic                  rst,          // asynchronous, active high
  input  logic [63:0]           xgmii_txd,
  input  logic [7:0]            xgmii_txc,
  output logic [LANES-1:0][19:0] tx_lane,
  output logic                  a_sent        // an ||A|| column was sent (for status)
);
  localparam int unsigned CW = $clog2(A_PERIOD + 1);

  logic [CW-1:0]          col_cnt, col_cnt_n;
  logic [LANES-1:0]       rd, rd_mid, rd_end;
  logic [LANES-1:0][1:0][7:0] cg_d;
  logic [LANES-1:0][1:0]  cg_k;
  logic [LANES-1:0][1:0][9:0] code;
  logic [LANES-1:0][1:0]  kerr;
  logic                   a_n;

  // column to code-group mapping
  always_comb begin
    col_cnt_n = col_cnt;
    a_n = 1'b0;
    for (int c = 0; c < 2; c++) begin
      logic idle_col;
      idle_col = 1'b1;
      for (int i = 0; i < LANES; i++)
        if (!(xgmii_txc[4*c+i] && xgmii_txd[32*c+8*i +: 8] == XGMII_IDLE)) idle_col = 1'b0;
      for (int i = 0; i < LANES; i++) begin
        logic [7:0] b;
        b = xgmii_txd[32*c+8*i +: 8];
        cg_k[i][c] = xgmii_txc[4*c+i];
        if (!xgmii_txc[4*c+i])
          cg_d[i][c] = b;
        else if (idle_col)
          cg_d[i][c] = (col_cnt_n >= CW'(A_PERIOD)) ? K28_3 : K28_5;
        else
          case (b)
            XGMII_IDLE:  cg_d[i][c] = K28_5;
            XGMII_START: cg_d[i][c] = K27_7;
            XGMII_TERM:  cg_d[i][c] = K29_7;
            XGMII_SEQ:   cg_d[i][c] = K28_4;
            default:     cg_d[i][c] = K30_7;
          endcase
      end
      if (idle_col && col_cnt_n >= CW'(A_PERIOD)) begin
        col_cnt_n = '0;
        a_n = 1'b1;
      end else if (col_cnt_n < CW'(A_PERIOD)) begin
        col_cnt_n = col_cnt_n + 1'b1;
      end
    end
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    xaui_enc8b10b u_enc0 (.din(cg_d[i][0]), .k(cg_k[i][0]), .rd_in(rd[i]),
                          .dout(code[i][0]), .rd_out(rd_mid[i]), .k_err(kerr[i][0]));
    xaui_enc8b10b u_enc1 (.din(cg_d[i][1]), .k(cg_k[i][1]), .rd_in(rd_mid[i]),
                          .dout(code[i][1]), .rd_out(rd_end[i]), .k_err(kerr[i][1]));
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      col_cnt <= '0;
      rd      <= '0;
      a_sent  <= 1'b0;
      for (int i = 0; i < LANES; i++) tx_lane[i] <= {10'b1010000011, 10'b0101111100};  // K28.5 RD-, RD+
    end else begin
      col_cnt <= col_cnt_n;
      rd      <= rd_end;
      a_sent  <= a_n;
      for (int i = 0; i < LANES; i++) tx_lane[i] <= {code[i][1], code[i][0]};
    end
  end

  // every control byte is mapped to a legal special code group above
  property p_no_kerr;
    @(posedge clk) disable iff (rst) kerr == '0;
  endproperty
  assert property (p_no_kerr);
endmodule
