// tb_clk_div: self-checking test of the tick divider.
// Runs a divider of 1000 Hz from 10 kHz (divide by 10) and one preset to a phase of 4, and
// checks the cycle of the first tick after reset, the tick period, the tick width and the
// spacing between the two tick trains.
module tb_clk_div;
  logic clk = 0, rst_n;
  logic tick_a, tick_b;
  int checks = 0, failures = 0;

  clk_div #(.CLK_HZ(10_000), .OUT_HZ(1000))             dut_a (.clk(clk), .rst_n(rst_n), .tick(tick_a));
  clk_div #(.CLK_HZ(10_000), .OUT_HZ(1000), .PHASE(4))  dut_b (.clk(clk), .rst_n(rst_n), .tick(tick_b));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc, last_a, last_b, na, nb;
  initial begin
    rst_n = 0; cyc = 0; last_a = -1; last_b = -1; na = 0; nb = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    // i counts clock edges after release: the first tick comes DIV-PHASE edges later
    for (int i = 1; i <= 205; i++) begin
      @(posedge clk); #1;
      if (tick_a) begin
        if (last_a < 0) check(i == 10, $sformatf("first tick a at %0d", i));
        else            check(i - last_a == 10, $sformatf("period a %0d", i - last_a));
        last_a = i; na++;
      end
      if (tick_b) begin
        if (last_b < 0) check(i == 6, $sformatf("first tick b at %0d", i));
        else            check(i - last_b == 10, $sformatf("period b %0d", i - last_b));
        last_b = i; nb++;
      end
      check(!(tick_a && tick_b), "ticks never coincide");
    end
    check(na == 20, $sformatf("tick count a %0d", na));
    check(nb == 20, $sformatf("tick count b %0d", nb));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
