// Reset synchroniser: the global asynchronous reset asserts the local reset
// at once and releases it two clocks after it is removed, in step with the
// local clock.
module xaui_rst_sync (
  input  logic clk,
  input  logic rst_in,   // asynchronous, active high
  output logic rst_out
);
  logic [1:0] r;
  always_ff @(posedge clk or posedge rst_in) begin
    if (rst_in) r <= 2'b11;
    else        r <= {r[0], 1'b0};
  end
  assign rst_out = r[1];
endmodule
