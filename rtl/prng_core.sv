// prng_core: the PRNG proper, a logistic-map iterator feeding an EWMA averager.
//
// The iterate register `xt` and the map's own output register form a loop: chaotic_lmap
// computes f(xt) into its output register and xt is then loaded from that output. The paper
// builds the same two-register loop, with xt as a register of its top module. Here each
// update takes two `tick`s. On the first, the map is stepped. On the second, xt takes the new
// iterate and the EWMA averages that same iterate into its output. So every update gives one
// new iterate and one new average, with avg(n) = EWMA(avg(n-1), x(n)). This matches the
// simulation trace of the paper, which starts at the seed (0x0BB8) for both and then prints
// x = 2CBB, 93A9, F9F5 ... and avg = 1252, 2C30, 5557 ... The split into two ticks, driven by
// a phase bit, is this design's choice; the paper clocks both registers on its 1 Hz clock.
//
// Interface: tick (update enable, 1 Hz on the board), seed (loaded into xt and avg while rst_n
// is low), r (map coefficient), xt (current iterate), avg (PRNG output), valid (one-cycle pulse
// when xt and avg have just taken a new value).
// Timing: one new output every two ticks; valid rises one clock after the second tick.
module prng_core #(
  parameter int unsigned W = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         tick,
  input  logic [W-1:0] seed,
  input  logic [7:0]   r,
  output logic [W-1:0] xt,
  output logic [W-1:0] avg,
  output logic         valid
);
  logic         phase;   // 0: step the map, 1: take the new iterate
  logic [W-1:0] pee;     // registered output of the map (named as in the paper)

  chaotic_lmap #(.W(W)) u_lmap (
    .clk    (clk),
    .en     (tick && !phase),
    .xt     (xt),
    .r      (r),
    .xtnext (pee)
  );

  ewma_avg #(.W(W)) u_ewma (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (tick && phase),
    .seed  (seed),
    .xt    (pee),
    .avg   (avg)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      xt    <= seed;
      phase <= 1'b0;
      valid <= 1'b0;
    end else begin
      valid <= tick && phase;
      if (tick) begin
        phase <= !phase;
        if (phase) xt <= pee;
      end
    end
  end

endmodule
