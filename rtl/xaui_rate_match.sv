// Rate-match FIFO of the XAUI receiver.
// The receive path runs on the recovered clock of its lanes (wclk), the
// XGMII receive bus on the local xgmii_clk (rclk); the two differ by the
// ppm offset between the far transmitter and the local oscillator. This
// dual-clock FIFO of DEPTH 64-bit XGMII words (two columns) bridges them
// and absorbs the offset by dropping or repeating filler words:
// - a filler word is one whose two columns are equal and are either all
//   Idle or the Local Fault ordered set, so it carries no frame data;
// - write side: when the FIFO holds HI words or more, an incoming filler
//   word is not written (del pulses); a word that arrives when the FIFO is
//   full is lost and flags ovf;
// - read side: when the FIFO holds LO words or fewer and the last word put
//   out was a filler word, that word is put out again instead of reading
//   (ins pulses). If the FIFO is empty after a non-filler word, an Error
//   word is put out and unf pulses.
// Pointers cross the clock domains in Gray code through two-flop
// synchronisers, so each side sees a fill level that may lag by a few
// clocks; HI and LO leave room for that. After reset the read side puts
// out Local Fault until LO words have gathered. Output registered.
// The source shows a rate-match FIFO in the receiver PCS without
// describing it. Clause 48 inserts and deletes single ||R|| columns on the
// code-group side; this design works on the decoded XGMII words and moves
// whole two-column filler words, so that the FIFO stays one word wide.
module xaui_rate_match
  import xaui_pkg::*;
#(
  parameter int unsigned DEPTH = 16,   // words, a power of two
  parameter int unsigned HI    = 12,   // delete at or above this fill
  parameter int unsigned LO    = 4     // insert at or below this fill
) (
  input  logic        wclk,
  input  logic        wrst,
  input  logic [63:0] wdata,
  input  logic [7:0]  wctrl,
  output logic        del,
  output logic        ovf,
  input  logic        rclk,
  input  logic        rrst,
  output logic [63:0] rdata,
  output logic [7:0]  rctrl,
  output logic        ins,
  output logic        unf
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam logic [31:0] IDLE_COL = {4{XGMII_IDLE}};
  localparam logic [31:0] LF_COL   = {8'h01, 8'h00, 8'h00, XGMII_SEQ};

  function automatic logic filler(input logic [63:0] d, input logic [7:0] c);
    return d[31:0] == d[63:32] && c[3:0] == c[7:4] &&
           ((c[3:0] == 4'hF && d[31:0] == IDLE_COL) || (c[3:0] == 4'h1 && d[31:0] == LF_COL));
  endfunction
  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [71:0] mem [DEPTH];
  logic [AW:0] wptr, rptr, wgray, rgray, wgray_r, rgray_w;
  logic [AW:0] fill_w, fill_r;

  xaui_sync #(.WIDTH(AW+1)) u_r2w (.clk(wclk), .rst(wrst), .d(rgray), .q(rgray_w));
  xaui_sync #(.WIDTH(AW+1)) u_w2r (.clk(rclk), .rst(rrst), .d(wgray), .q(wgray_r));

  // ---------------- write side ----------------
  assign fill_w = wptr - gray2bin(rgray_w);

  always_ff @(posedge wclk or posedge wrst) begin
    if (wrst) begin
      wptr  <= '0;
      wgray <= '0;
      del   <= 1'b0;
      ovf   <= 1'b0;
    end else begin
      del <= 1'b0;
      ovf <= 1'b0;
      if (fill_w >= (AW+1)'(HI) && filler(wdata, wctrl)) del <= 1'b1;
      else if (fill_w >= (AW+1)'(DEPTH)) ovf <= 1'b1;
      else begin
        wptr  <= wptr + 1'b1;
        wgray <= bin2gray(wptr + 1'b1);
      end
    end
  end

  always_ff @(posedge wclk)
    if (!wrst && !(fill_w >= (AW+1)'(HI) && filler(wdata, wctrl)) && fill_w < (AW+1)'(DEPTH))
      mem[wptr[AW-1:0]] <= {wctrl, wdata};

  // ---------------- read side ----------------
  assign fill_r = gray2bin(wgray_r) - rptr;

  logic started;

  always_ff @(posedge rclk or posedge rrst) begin
    if (rrst) begin
      rptr    <= '0;
      rgray   <= '0;
      rdata   <= {LF_COL, LF_COL};
      rctrl   <= 8'h11;
      ins     <= 1'b0;
      unf     <= 1'b0;
      started <= 1'b0;
    end else begin
      ins <= 1'b0;
      unf <= 1'b0;
      if (fill_r > (AW+1)'(LO)) started <= 1'b1;
      if (!started || (fill_r <= (AW+1)'(LO) && filler(rdata, rctrl))) begin
        // repeat the filler word
        if (started) ins <= 1'b1;
      end else if (fill_r == '0) begin
        rdata <= {8{XGMII_ERROR}};
        rctrl <= 8'hFF;
        unf   <= 1'b1;
      end else begin
        {rctrl, rdata} <= mem[rptr[AW-1:0]];
        rptr  <= rptr + 1'b1;
        rgray <= bin2gray(rptr + 1'b1);
      end
    end
  end

  initial assert (DEPTH == (1 << AW) && LO < HI && HI <= DEPTH - 2)
    else $error("xaui_rate_match: DEPTH must be a power of two and LO < HI <= DEPTH-2");
endmodule
