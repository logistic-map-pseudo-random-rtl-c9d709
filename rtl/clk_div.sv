// clk_div: integer clock divider that produces a one-cycle tick at OUT_HZ.
//
// The design keeps a single system clock. Each of the design's slow "clocks" (the 1 Hz PRNG
// update, the 500 Hz digit scan and the three rates of the serial link) is a clk_div
// instance. Each instance gives a one-cycle enable pulse rather than a derived clock, so that
// all state stays in one clock domain. The counter counts 0 .. CLK_HZ/OUT_HZ-1 and `tick` is
// high on the last count. PHASE presets the counter on reset, which shifts the tick train.
// Two dividers of the same rate can then fire a fixed number of cycles apart.
//
// Interface: clk, synchronous active-low rst_n, output tick.
// Timing: the first tick comes DIV-PHASE cycles after reset is released, then one every DIV
// cycles, where DIV = CLK_HZ/OUT_HZ (rounded down, at least 1).
// The paper names five clock modules and gives their rates (clk1 1 Hz, clk2 500 Hz, UART
// rates for clk3..clk5). Building them as counters that give enable pulses is this design's
// choice.
module clk_div #(
  parameter int unsigned CLK_HZ = prng_pkg::SYSCLK_HZ_DEF,
  parameter int unsigned OUT_HZ = prng_pkg::PRNG_HZ_DEF,
  parameter int unsigned PHASE  = 0
) (
  input  logic clk,
  input  logic rst_n,
  output logic tick
);
  localparam int unsigned DIV = (CLK_HZ / OUT_HZ) < 1 ? 1 : (CLK_HZ / OUT_HZ);
  localparam int unsigned CW  = (DIV > 1) ? $clog2(DIV) : 1;

  logic [CW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= CW'(PHASE % DIV);
      tick <= 1'b0;
    end else begin
      tick <= (cnt == CW'(DIV - 1));
      if (cnt == CW'(DIV - 1)) cnt <= '0;
      else                     cnt <= cnt + 1'b1;
    end
  end

endmodule
