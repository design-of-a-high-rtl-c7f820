// Lane deskew of the XAUI receiver.
// Each lane delivers two decoded code groups per clock (index 0 first). Every
// lane writes them into its own shift register of DEPTH code groups; the
// lanes are deskewed by reading each register at its own depth. To find
// the depths the block waits, in the ACQUIRE state, until every lane has
// received an /A/ (K28.3), recording how many code groups ago it arrived;
// once all have, lane i is read at depth age_i - min(age), which puts the
// four /A/ of one ||A|| column into the same output column. The block then
// reports aligned. In ALIGNED it watches the output: a column in which some
// but not all lanes carry /A/ counts as a misalignment, and MIS_LIMIT of
// them in a row, or loss of word sync on any lane, return it to ACQUIRE.
// The largest skew corrected is DEPTH-2 code groups. Output registered.
// The paper names the deskew FIFO only; this shift-register form is this
// design's own.
module xaui_deskew
  import xaui_pkg::*;
#(
  parameter int unsigned DEPTH     = 16,
  parameter int unsigned MIS_LIMIT = 2
) (
  input  logic                    clk,
  input  logic                    rst,       // asynchronous, active high
  input  logic [LANES-1:0]        lane_sync, // word sync of each lane
  input  sym_t [LANES-1:0][1:0]   din,
  output sym_t [LANES-1:0][1:0]   dout,
  output logic                    aligned,
  output logic                    align_event // pulse: new lane delays taken
);
  localparam int unsigned AW = $clog2(DEPTH + 2);

  typedef enum logic {ACQUIRE, ALIGNED} state_t;
  state_t state;

  sym_t [LANES-1:0][DEPTH-1:0] hist;   // [0] newest
  logic [LANES-1:0]            seen, seen_n;
  logic [LANES-1:0][AW-1:0]    age, age_n, dly;
  logic [AW-1:0]               min_age;
  logic [1:0]                  mis_cnt;
  logic [1:0]                  col_a_any, col_a_all;

  function automatic logic is_a(input sym_t s);
    is_a = s.k && !s.err && s.d == K28_3;
  endfunction

  // age of the last /A/ per lane, counted in the shift register as it will
  // be after this clock
  always_comb begin
    min_age = AW'(DEPTH);
    for (int i = 0; i < LANES; i++) begin
      seen_n[i] = seen[i];
      age_n[i]  = age[i] + AW'(2);
      if (is_a(din[i][1])) begin
        seen_n[i] = 1'b1; age_n[i] = '0;
      end else if (is_a(din[i][0])) begin
        seen_n[i] = 1'b1; age_n[i] = AW'(1);
      end else if (age_n[i] > AW'(DEPTH - 2)) begin
        seen_n[i] = 1'b0;
      end
      if (age_n[i] < min_age) min_age = age_n[i];
    end
  end

  // /A/ seen in the deskewed output columns
  always_comb begin
    for (int c = 0; c < 2; c++) begin
      col_a_any[c] = 1'b0;
      col_a_all[c] = 1'b1;
      for (int i = 0; i < LANES; i++) begin
        if (is_a(dout[i][c])) col_a_any[c] = 1'b1;
        else col_a_all[c] = 1'b0;
      end
    end
  end

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      state       <= ACQUIRE;
      hist        <= '0;
      seen        <= '0;
      age         <= '0;
      dly         <= '0;
      dout        <= '0;
      mis_cnt     <= '0;
      align_event <= 1'b0;
    end else begin
      align_event <= 1'b0;
      for (int i = 0; i < LANES; i++) begin
        hist[i] <= {hist[i][DEPTH-3:0], din[i][0], din[i][1]};
        dout[i][0] <= hist[i][dly[i] + 1];
        dout[i][1] <= hist[i][dly[i]];
      end
      age <= age_n;
      if (lane_sync != '1) begin
        state <= ACQUIRE;
        seen  <= '0;
      end else if (state == ACQUIRE) begin
        seen <= seen_n;
        if (seen_n == '1) begin
          for (int i = 0; i < LANES; i++) dly[i] <= age_n[i] - min_age;
          state       <= ALIGNED;
          seen        <= '0;
          mis_cnt     <= '0;
          align_event <= 1'b1;
        end
      end else begin
        if ((col_a_any[0] && !col_a_all[0]) || (col_a_any[1] && !col_a_all[1])) begin
          if (mis_cnt == 2'(MIS_LIMIT - 1)) begin
            state <= ACQUIRE;
            seen  <= '0;
          end else mis_cnt <= mis_cnt + 1'b1;
        end else if (col_a_all[0] || col_a_all[1]) begin
          mis_cnt <= '0;
        end
      end
    end
  end

  assign aligned = (state == ALIGNED);
endmodule
