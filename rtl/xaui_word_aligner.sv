// Word aligner of one XAUI receive lane.
// The lane arrives as 20-bit words (two 10-bit code groups, bit 0 first) cut
// at an arbitrary bit position. The aligner keeps the previous word, looks
// for the 7-bit comma (0011111 or 1100000 in abcdeif order) of /K/ at every
// bit position of the 40-bit window, and shifts the output so that the
// comma starts a 10-bit code group. Synchronisation (a simplification of
// the clause 48 state machine): while out of sync every comma moves the
// alignment, and SYNC_COMMAS commas in a row at the same position declare
// sync; in sync, BAD_COMMAS commas in a row at a different position, or
// BAD_WORDS output words in a row holding an invalid code group (cg_err,
// fed back from the decoders behind the aligner), drop sync again. Output
// registered, one clock after the input word.
module xaui_word_aligner #(
  parameter int unsigned SYNC_COMMAS = 4,
  parameter int unsigned BAD_COMMAS  = 4,
  parameter int unsigned BAD_WORDS   = 4
) (
  input  logic        clk,
  input  logic        rst,      // asynchronous, active high
  input  logic [19:0] din,
  output logic [19:0] dout,
  input  logic        cg_err,   // dout holds an invalid code group
  output logic        sync,
  output logic        realigned // pulse: the alignment position changed
);
  logic [19:0] prev;
  logic [39:0] win;
  logic [3:0]  off, off_n, found_off;
  logic        found;
  logic [$clog2(SYNC_COMMAS+1)-1:0] good_cnt;
  logic [$clog2(BAD_COMMAS+1)-1:0]  bad_cnt;
  logic [$clog2(BAD_WORDS+1)-1:0]   err_cnt;

  assign win = {din, prev};

  // lowest bit position holding a comma, folded onto a 10-bit boundary
  always_comb begin
    found = 1'b0;
    found_off = '0;
    for (int p = 19; p >= 0; p--)
      if (win[p +: 7] == 7'b1111100 || win[p +: 7] == 7'b0000011) begin
        found = 1'b1;
        found_off = (p >= 10) ? 4'(p - 10) : 4'(p);
      end
    off_n = off;
    if (found && !sync) off_n = found_off;
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      prev      <= '0;
      dout      <= '0;
      off       <= '0;
      sync      <= 1'b0;
      good_cnt  <= '0;
      bad_cnt   <= '0;
      err_cnt   <= '0;
      realigned <= 1'b0;
    end else begin
      prev      <= din;
      dout      <= win[6'(off_n) +: 20];
      off       <= off_n;
      realigned <= (off_n != off);
      if (!sync || !cg_err) err_cnt <= '0;
      else if (err_cnt == ($bits(err_cnt))'(BAD_WORDS - 1)) begin
        sync    <= 1'b0;
        err_cnt <= '0;
      end else err_cnt <= err_cnt + 1'b1;
      if (found) begin
        if (!sync) begin
          if (found_off == off && good_cnt != '0) begin
            if (good_cnt == ($bits(good_cnt))'(SYNC_COMMAS - 1)) begin
              sync <= 1'b1;
              good_cnt <= '0;
            end else good_cnt <= good_cnt + 1'b1;
          end else good_cnt <= ($bits(good_cnt))'(1);
          bad_cnt <= '0;
        end else if (found_off != off) begin
          if (bad_cnt == ($bits(bad_cnt))'(BAD_COMMAS - 1)) begin
            sync <= 1'b0;
            bad_cnt <= '0;
          end else bad_cnt <= bad_cnt + 1'b1;
        end else bad_cnt <= '0;
      end
    end
  end
endmodule
