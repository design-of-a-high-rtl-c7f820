// Two-flop synchroniser for slow level signals (control bits, status bits)
// crossing between the management clock and the XGMII clock. Each bit is
// synchronised on its own, so a multi-bit value may be seen mixed for one
// clock while it changes; it is only used for bits that change rarely.
module xaui_sync #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst,   // asynchronous, active high
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] meta;
  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
