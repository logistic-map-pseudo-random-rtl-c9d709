// tb_prng_workload: runs the PRNG core through 1000 outputs from each of three seeds and
// reports the statistics of the output stream.
//
// Seeds: 6000 (the starting value of the floating-point proof of concept), 0x0BB8 (the
// seed of the published waveform) and 1 (the value a zero ADC reading is replaced by). Every
// output is checked against an independent 64-bit model. For each seed the test prints the
// mean, the standard deviation, a 10-bin histogram over 0..65535 and the length of the
// cycle the 16-bit map falls into. It checks that the stream is neither stuck nor
// degenerate (standard deviation above 2000, at least three histogram bins used).
// The 16-bit map is exact integer arithmetic and has only 65536 states, so every seed ends
// in a cycle; the floating-point prototype does not, so its histogram cannot be matched bin
// for bin.
module tb_prng_workload;
  localparam int N = 1000;
  logic        clk = 0, rst_n, tick;
  logic [15:0] seed, xt, avg;
  logic        valid;
  int checks = 0, failures = 0;

  prng_core dut (.clk(clk), .rst_n(rst_n), .tick(tick), .seed(seed), .r(8'd4),
                 .xt(xt), .avg(avg), .valid(valid));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc > 64'd100_000) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  function automatic longint lmap(input longint x);
    return (4 * x * (65535 - x) + 32767) / 65535;
  endfunction

  task automatic run_seed(input logic [15:0] s);
    longint mx, ma;
    real    sum, sumsq, mean, sd;
    int     hist [10];
    int     bins_used, first_seen [int], cycle_len, tail;
    string  h;
    seed = s; rst_n = 0; tick = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    mx = s; ma = s; sum = 0; sumsq = 0;
    foreach (hist[i]) hist[i] = 0;
    first_seen.delete();
    cycle_len = 0; tail = 0;
    first_seen[int'(mx)] = 0;
    for (int n = 1; n <= N; n++) begin
      @(negedge clk); tick = 1;
      @(negedge clk); tick = 1;
      @(negedge clk); tick = 0;
      mx = lmap(mx);
      ma = (40 * ma + 10 * mx) / 50;
      check(xt == 16'(mx) && avg == 16'(ma),
            $sformatf("seed %0d step %0d: %h/%h expected %h/%h", s, n, xt, avg, 16'(mx), 16'(ma)));
      if (cycle_len == 0 && first_seen.exists(int'(mx))) begin
        tail = first_seen[int'(mx)];
        cycle_len = n - tail;
      end else if (cycle_len == 0) begin
        first_seen[int'(mx)] = n;
      end
      sum   += real'(avg);
      sumsq += real'(avg) * real'(avg);
      hist[int'(avg) * 10 / 65536]++;
    end
    mean = sum / N;
    sd   = $sqrt(sumsq / N - mean * mean);
    bins_used = 0;
    h = "";
    foreach (hist[i]) begin
      if (hist[i] > 0) bins_used++;
      h = {h, $sformatf(" %0d", hist[i])};
    end
    $display("seed %5d: mean %0.0f  sd %0.0f  histogram%s  map cycle %0d after %0d steps",
             s, mean, sd, h, cycle_len, tail);
    check(sd > 2000.0, $sformatf("seed %0d: spread %0.0f", s, sd));
    check(bins_used >= 3, $sformatf("seed %0d: %0d bins used", s, bins_used));
    check(cycle_len > 0, $sformatf("seed %0d: cycle found", s));
  endtask

  initial begin
    tick = 0; rst_n = 0; seed = 0;
    run_seed(16'd6000);
    run_seed(16'h0BB8);
    run_seed(16'd1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
