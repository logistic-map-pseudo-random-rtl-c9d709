// tb_drv_segment: self-checking test of the four-digit hexadecimal display driver.
// For random values, scans through the digits with ticks and checks that exactly one digit
// is enabled (active low), that digit i shows nibble i, and that the segment pattern spells
// that hex digit. The expected patterns are written as lists of lit segments ("abcdef" for 0)
// and converted here, independently of the driver's own table.
module tb_drv_segment;
  logic        clk = 0, rst_n, tick;
  logic [15:0] value;
  logic [6:0]  seg;
  logic [3:0]  an;
  logic        dp;
  int checks = 0, failures = 0;

  drv_segment dut (.clk(clk), .rst_n(rst_n), .tick(tick), .value(value),
                   .seg(seg), .an(an), .dp(dp));

  always #5 clk = ~clk;

  string lit [16] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc",
                      "abcdefg", "abcdfg", "abcefg", "cdefg", "adef", "bcdeg", "adefg", "aefg"};

  function automatic logic [6:0] pattern(input int d);   // active-high, bit 0 = a
    logic [6:0] p = '0;
    for (int i = 0; i < lit[d].len(); i++) p[3'(lit[d][i] - "a")] = 1'b1;
    return p;
  endfunction

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

  int seen [4];

  initial begin
    tick = 0; rst_n = 0; value = 16'h0000;
    repeat (3) @(negedge clk);
    check(an == 4'hF, "all digits dark in reset");
    rst_n = 1;
    for (int k = 0; k < 200; k++) begin
      int d;
      value = (k < 16) ? {4{4'(k)}} : 16'($urandom);
      for (int s = 0; s < 4; s++) begin
        @(negedge clk); @(negedge clk);
        d = -1;
        for (int i = 0; i < 4; i++) if (!an[i]) begin
          check(d < 0, "one digit at a time");
          d = i;
        end
        check(d >= 0, "a digit is lit");
        if (d >= 0) begin
          seen[d]++;
          check(~seg == pattern(value[4*d +: 4]),
                $sformatf("digit %0d of %h shows %b", d, value, ~seg));
        end
        check(dp == 1'b1, "decimal point dark");
        tick = 1; @(negedge clk); tick = 0;
      end
    end
    for (int i = 0; i < 4; i++) check(seen[i] == 200, $sformatf("digit %0d scanned %0d times", i, seen[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
