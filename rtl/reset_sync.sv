// reset_sync: two-flop synchronizer for an active-low reset input.
//
// The output goes low as soon as the input goes low (asynchronously) and goes high again
// two clock edges after the input has gone high, so every register that uses it leaves
// reset on the same clock edge.
module reset_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic [1:0] sync;

  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) sync <= 2'b00;
    else         sync <= {sync[0], 1'b1};
  end

  assign rst_n = sync[1];

endmodule
