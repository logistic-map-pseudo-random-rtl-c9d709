// tb_uart_byte_split: self-checking test of the word-to-byte splitter of the serial link.
// Changes the input word between pairs of ticks and checks that the bytes come out low byte
// first, then high byte, each taken from the word copied on the previous tick, that `odd`
// alternates, and that nothing changes between ticks.
module tb_uart_byte_split;
  logic        clk = 0, rst_n, tick;
  logic [15:0] disp;
  logic [7:0]  tx_data;
  logic        odd;
  int checks = 0, failures = 0;

  uart_byte_split dut (.clk(clk), .rst_n(rst_n), .tick(tick), .disp(disp),
                       .tx_data(tx_data), .odd(odd));

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

  logic [15:0] prev;
  bit          next_high;
  logic [7:0]  hold;

  initial begin
    tick = 0; rst_n = 0; disp = 16'hBEEF;
    repeat (3) @(negedge clk);
    check(tx_data == 8'h00 && !odd, "reset values");
    rst_n = 1;
    prev = 16'h0000;     // the copy register is cleared by reset
    next_high = 0;
    for (int k = 0; k < 400; k++) begin
      if (k % 2 == 0 && k > 0) disp = 16'($urandom);
      @(negedge clk); tick = 1;
      @(negedge clk); tick = 0;
      check(tx_data == (next_high ? prev[15:8] : prev[7:0]),
            $sformatf("byte %0d: %h from %h (%s)", k, tx_data, prev, next_high ? "high" : "low"));
      check(odd == !next_high, "odd follows the byte order");
      prev = disp;
      next_high = !next_high;
      hold = tx_data;
      repeat (3) @(negedge clk);
      check(tx_data == hold, "byte holds between ticks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
