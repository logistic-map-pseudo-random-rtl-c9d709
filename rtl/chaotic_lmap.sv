// chaotic_lmap: one step of the rescaled logistic map, registered.
//
// The logistic map x' = r*x*(1-x) is computed on 16-bit integers with 1.0 scaled to 65535:
//   xtnext = round( r * xt * (65535 - xt) / 65535 )
// where the rounding is done as (product + 32767) / 65535. With r = 4 the 32-bit product
// peaks at 4*32767*32768 < 2^32, so nothing overflows and the result always fits in 16 bits.
// The formula, the widths, the rounding constant and the output register follow the paper.
// The clock enable `en` is this design's addition: the paper clocks the module on its 1 Hz
// clock, while here it runs on the system clock and steps only when `en` is high. The product
// is taken modulo 2^32 as in the paper, so r above 4 gives wrapped results.
//
// Interface: xt (current iterate), r (8-bit coefficient), xtnext (registered next iterate).
// Timing: xtnext takes the new value one clock after a cycle with en high; it has no reset,
// since its output is only read after it has been written.
module chaotic_lmap #(
  parameter int unsigned W = 16                  // word width; 1.0 is scaled to 2^W-1
) (
  input  logic          clk,
  input  logic          en,
  input  logic [W-1:0]  xt,
  input  logic [7:0]    r,
  output logic [W-1:0]  xtnext
);
  localparam int unsigned PW = 2 * W;            // width of the product, as in the paper
  localparam logic [PW-1:0] FULL = PW'((64'd1 << W) - 1);   // 65535 for W = 16
  localparam logic [PW-1:0] HALF = PW'((64'd1 << (W - 1)) - 1); // 32767, rounds to nearest

  logic [PW-1:0] intermediate;
  logic [PW-1:0] quotient;

  always_comb begin
    intermediate = PW'(r) * PW'(xt) * (FULL - PW'(xt));
    quotient     = (intermediate + HALF) / FULL;
  end

  always_ff @(posedge clk) begin
    if (en) xtnext <= quotient[W-1:0];
  end

endmodule
