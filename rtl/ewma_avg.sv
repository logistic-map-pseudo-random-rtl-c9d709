// ewma_avg: exponentially weighted moving average of the logistic-map iterates.
//
// Each update replaces the average with
//   avg = floor( (A_OLD*avg + A_NEW*xt) / A_DEN )
// which for the paper's weights 40, 10 and 50 is EWMA with alpha = 1/5 on the new sample.
// Averaging the chaotic iterates this way gives outputs whose histogram is bell-shaped.
// Reset loads the seed into the average, so that the first output is the seed itself. The
// formula, the weights and the seed load follow the paper. The paper triggers the update
// on a rising edge of the sample itself and loads the seed through an asynchronous reset.
// Here the average is a plain register on the system clock. It updates in a cycle with `en`
// high, and the seed load is a synchronous reset. Both are this design's choices.
//
// Interface: seed (value loaded while rst_n is low), xt (new sample), avg (registered).
// Timing: avg changes one clock after a cycle with en high.
module ewma_avg #(
  parameter int unsigned W     = 16,
  parameter int unsigned A_OLD = 40,   // weight of the previous average
  parameter int unsigned A_NEW = 10,   // weight of the new sample
  parameter int unsigned A_DEN = 50    // divisor, A_OLD + A_NEW
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         en,
  input  logic [W-1:0] seed,
  input  logic [W-1:0] xt,
  output logic [W-1:0] avg
);
  logic [31:0] inter;

  always_comb inter = (32'(avg) * 32'(A_OLD) + 32'(A_NEW) * 32'(xt)) / 32'(A_DEN);

  always_ff @(posedge clk) begin
    if (!rst_n)  avg <= seed;
    else if (en) avg <= inter[W-1:0];
  end

endmodule
