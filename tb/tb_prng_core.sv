// tb_prng_core: self-checking test of the logistic-map + EWMA PRNG core.
// Holds the core in reset with seed 0BB8, then ticks it and checks each new (x, avg) pair
// against the published trace and, for 200 further outputs, against an independent 64-bit
// reference. Also checks that exactly one output appears per two ticks, that valid is a
// one-cycle pulse, that nothing moves between ticks, and that a second reset restarts the
// sequence from a new seed.
module tb_prng_core;
  logic        clk = 0, rst_n, tick;
  logic [15:0] seed, xt, avg;
  logic        valid;
  int checks = 0, failures = 0;

  prng_core dut (.clk(clk), .rst_n(rst_n), .tick(tick), .seed(seed), .r(8'd4),
                 .xt(xt), .avg(avg), .valid(valid));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint mx, ma;
  int     nticks, nvalid;

  // one tick, then a few idle cycles; returns whether valid pulsed
  task automatic do_tick(output bit got_valid);
    logic [15:0] x0, a0;
    got_valid = 0;
    @(negedge clk); tick = 1;
    @(negedge clk); tick = 0;
    nticks++;
    x0 = xt; a0 = avg;
    for (int i = 0; i < 4; i++) begin
      if (valid) begin got_valid = 1; nvalid++; end
      @(negedge clk);
      check(xt == x0 && avg == a0 || i == 0, "no change between ticks");
    end
  endtask

  logic [15:0] xs  [5] = '{16'h2CBB, 16'h93A9, 16'hF9F5, 16'h1796, 16'h55A7};
  logic [15:0] avs [5] = '{16'h1252, 16'h2C30, 16'h5557, 16'h48FD, 16'h4B85};

  task automatic run(input int n, input bit use_trace);
    bit v;
    for (int k = 0; k < n; k++) begin
      do_tick(v);
      check(!v, $sformatf("no output on first tick of step %0d", k));
      do_tick(v);
      check(v, $sformatf("output on second tick of step %0d", k));
      mx = (4 * mx * (65535 - mx) + 32767) / 65535;
      ma = (40 * ma + 10 * mx) / 50;
      check(xt == 16'(mx) && avg == 16'(ma),
            $sformatf("step %0d: x=%h avg=%h expected %h %h", k, xt, avg, 16'(mx), 16'(ma)));
      if (use_trace && k < 5)
        check(xt == xs[k] && avg == avs[k], $sformatf("published trace step %0d", k));
    end
  endtask

  initial begin
    tick = 0; nticks = 0; nvalid = 0;
    seed = 16'h0BB8; rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(xt == 16'h0BB8 && avg == 16'h0BB8, "seed loaded into x and avg");
    mx = 16'h0BB8; ma = 16'h0BB8;
    run(200, 1);
    check(nvalid * 2 == nticks, $sformatf("rate: %0d outputs for %0d ticks", nvalid, nticks));
    // restart from the Julia seed 6000
    seed = 16'd6000; rst_n = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(xt == 16'd6000 && avg == 16'd6000, "second seed loaded");
    mx = 6000; ma = 6000;
    run(50, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
