// tb_xadc_seed: self-checking test of the ADC read-out and seed register.
// An ADC model converts every 50 clocks and answers DRP reads after 4 clocks; every fifth
// conversion reads 0. The test checks the read address and write enable, that each read
// captures the value the model returned, that a tick copies the last reading into the
// seed and turns a zero reading into 1, and that the seed is 1 after reset.
module tb_xadc_seed;
  logic        clk = 0, rst_n, tick;
  logic        eoc, drdy, den, dwe;
  logic [15:0] do_out, di, adc_data, seed, sample;
  logic [6:0]  daddr, last_addr;
  int checks = 0, failures = 0;

  xadc_seed dut (.clk(clk), .rst_n(rst_n), .tick(tick), .eoc(eoc), .drdy(drdy),
                 .do_out(do_out), .den(den), .dwe(dwe), .daddr(daddr), .di(di),
                 .adc_data(adc_data), .seed(seed));

  xadc_model #(.EOC_PERIOD(50), .DRDY_LAT(4), .ZERO_EVERY(5)) adc (
    .clk(clk), .den(den), .dwe(dwe), .daddr(daddr), .force_zero(1'b0), .eoc(eoc), .drdy(drdy),
    .do_out(do_out), .sample(sample), .last_addr(last_addr));

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

  int nreads = 0, nzero = 0, ntick = 0;

  // every drdy must be captured
  always @(posedge clk) begin
    if (rst_n && drdy) begin
      logic [15:0] v;
      v = do_out;
      @(negedge clk);
      check(adc_data == v, $sformatf("captured %h expected %h", adc_data, v));
      nreads++;
    end
  end

  initial begin
    tick = 0; rst_n = 0;
    repeat (3) @(negedge clk);
    check(seed == 16'd1, "seed is 1 after reset");
    check(!den, "no read during reset");
    rst_n = 1;
    for (int k = 0; k < 40; k++) begin
      logic [15:0] last;
      repeat (20 + ($urandom % 60)) @(negedge clk);
      last = adc_data;
      tick = 1;
      @(negedge clk); tick = 0;
      check(seed == ((last == 0) ? 16'd1 : last), $sformatf("seed %h after reading %h", seed, last));
      if (last == 0) nzero++;
      ntick++;
      if (den) check(daddr == 7'h1C && !dwe, "read of the VAUX12 register");
    end
    check(last_addr == 7'h1C, "address seen by the ADC");
    check(nreads > 20, $sformatf("reads done: %0d", nreads));
    check(nzero > 0, $sformatf("zero readings replaced: %0d", nzero));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
