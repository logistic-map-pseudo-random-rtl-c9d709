// tb_chaotic_lmap: self-checking test of one registered logistic-map step.
// Checks the map against the trace 0BB8 -> 2CBB -> 93A9 -> F9F5 -> 1796 -> 55A7, against an
// independent 64-bit reference for the end points, the fixed point and random inputs, that
// the output moves one clock after `en` and that it holds while `en` is low.
module tb_chaotic_lmap;
  logic        clk = 0;
  logic        en;
  logic [15:0] xt, xtnext;
  logic [7:0]  r;
  int checks = 0, failures = 0;

  chaotic_lmap dut (.clk(clk), .en(en), .xt(xt), .r(r), .xtnext(xtnext));

  always #5 clk = ~clk;

  function automatic logic [15:0] ref_map(input longint x, input longint rr);
    return 16'((rr * x * (65535 - x) + 32767) / 65535);
  endfunction

  task automatic check(input logic [15:0] got, input logic [15:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic step(input logic [15:0] x);
    @(negedge clk); xt = x; en = 1;
    @(negedge clk); en = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0] trace [6] = '{16'h0BB8, 16'h2CBB, 16'h93A9, 16'hF9F5, 16'h1796, 16'h55A7};
  logic [15:0] hold;

  initial begin
    en = 0; r = 8'd4; xt = 0;
    // trace of the published simulation
    for (int i = 0; i < 5; i++) begin
      step(trace[i]);
      check(xtnext, trace[i+1], $sformatf("trace step %0d", i));
    end
    // the output must not move while en is low
    hold = xtnext;
    @(negedge clk); xt = 16'h1234;
    repeat (3) @(negedge clk);
    check(xtnext, hold, "hold with en low");
    // latency: one clock
    @(negedge clk); xt = 16'h4000; en = 1;
    @(posedge clk); #1;
    check(xtnext, ref_map(16'h4000, 4), "one-clock latency");
    @(negedge clk); en = 0;
    // special points
    step(16'd0);      check(xtnext, 16'd0,     "zero is fixed");
    step(16'd65535);  check(xtnext, 16'd0,     "one maps to zero");
    step(16'd32767);  check(xtnext, 16'd65535, "peak below half");
    step(16'd32768);  check(xtnext, 16'd65535, "peak above half");
    step(16'd1);      check(xtnext, 16'd4,     "seed one");
    // random inputs, r = 4 and r = 3
    for (int i = 0; i < 300; i++) begin
      logic [15:0] x;
      x = 16'($urandom);
      r = (i % 3 == 0) ? 8'd3 : 8'd4;
      step(x);
      check(xtnext, ref_map(x, r), $sformatf("random x=%h r=%0d", x, r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
