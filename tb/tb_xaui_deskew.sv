// Self-checking test of the lane deskew. A column stream is generated here:
// ||A|| columns every 20 to 27 columns, the rest random data columns (unique
// per column through a counter) and a few ||K|| columns. Lane i sees the
// stream delayed by its own skew of 0 to 12 code groups, two code groups per
// clock. After each alignment the test checks that every output column is
// one whole input column and that consecutive output columns are
// consecutive input columns. The skews are then changed twice: once while
// word sync is dropped (re-acquire through lane_sync) and once silently
// (re-acquire through the misalignment counter).
module tb_xaui_deskew;
  import xaui_pkg::*;
  localparam int NCOL = 6000;
  logic clk = 0, rst = 1;
  logic [3:0] lane_sync;
  sym_t [3:0][1:0] din, dout;
  logic aligned, align_event;
  int checks = 0, failures = 0, events = 0;

  xaui_deskew dut (.clk, .rst, .lane_sync, .din, .dout, .aligned, .align_event);
  always #5 clk = ~clk;

  sym_t col [NCOL][4];
  int skew [4];
  int t = 0;   // code-group time

  initial begin
    #5000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sym_t lane_sym(int lane, int tt);
    int j;
    j = tt - skew[lane];
    if (j < 0) return '{err: 1'b0, k: 1'b1, d: K28_5};
    return col[j][lane];
  endfunction

  // compare the current output column with the input columns
  int expect_j = -1;
  task automatic check_out();
    for (int c = 0; c < 2; c++) begin
      int j;
      j = -1;
      if (expect_j >= 0) j = expect_j;
      else
        for (int q = (t > 48 ? t - 48 : 0); q < t && q < NCOL; q++)
          if (!dout[0][c].k && col[q][0] == dout[0][c]) begin j = q; break; end
      if (j < 0) continue;
      checks++;
      for (int i = 0; i < 4; i++)
        if (dout[i][c] !== col[j][i]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d lane%0d col %0d: got %h exp %h", t, i, j, dout[i][c], col[j][i]);
          break;
        end
      expect_j = j + 1;
    end
  endtask

  task automatic run(int cycles, bit check);
    for (int n = 0; n < cycles; n++) begin
      for (int i = 0; i < 4; i++) begin
        din[i][0] = lane_sym(i, t);
        din[i][1] = lane_sym(i, t + 1);
      end
      t += 2;
      @(posedge clk); #1;
      if (align_event) begin events++; expect_j = -1; end
      if (check && aligned) check_out();
    end
  endtask

  initial begin
    int next_a;
    next_a = 5;
    for (int j = 0; j < NCOL; j++) begin
      for (int i = 0; i < 4; i++) begin
        if (j == next_a) col[j][i] = '{err: 1'b0, k: 1'b1, d: K28_3};
        else if (j % 9 == 4) col[j][i] = '{err: 1'b0, k: 1'b1, d: K28_5};
        else col[j][i] = '{err: 1'b0, k: 1'b0, d: 8'(j * 4 + i + j / 64)};
      end
      if (j == next_a) next_a = j + 20 + $urandom % 8;
    end
    // data bytes repeat every 64 columns, so the first output column is
    // looked up only among the last 48 columns sent
    for (int i = 0; i < 4; i++) skew[i] = $urandom % 13;
    lane_sync = '1;
    din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    run(200, 0);
    checks++;
    if (!aligned) begin failures++; $display("FAIL not aligned"); end
    expect_j = -1;
    run(400, 1);
    // new skews with sync drop
    lane_sync = 4'b1011;
    for (int i = 0; i < 4; i++) skew[i] = $urandom % 13;
    run(2, 0);
    checks++;
    if (aligned) begin failures++; $display("FAIL still aligned without lane sync"); end
    lane_sync = '1;
    run(200, 0);
    checks++;
    if (!aligned) begin failures++; $display("FAIL not re-aligned after sync loss"); end
    expect_j = -1;
    run(400, 1);
    // silent skew change: misalignment must be detected
    skew[1] = (skew[1] + 5) % 13;
    skew[3] = (skew[3] + 3) % 13;
    run(300, 0);
    expect_j = -1;
    run(400, 1);
    checks++;
    if (events < 3) begin failures++; $display("FAIL only %0d alignment events", events); end
    $display("alignment events %0d", events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
