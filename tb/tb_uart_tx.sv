// tb_uart_tx: self-checking test of the 8N1 serial transmitter.
// Baud ticks come every 16 clocks. A receiver in the test finds each start edge and samples
// the line at the middle of each bit. The test checks the received bytes, the stop bit, the
// frame length (10 bit times), that the line is high between frames, that busy covers the
// frame, and that a start request while busy is ignored.
module tb_uart_tx;
  localparam int BIT = 16;
  logic       clk = 0, rst_n, baud_tick, start;
  logic [7:0] data;
  logic       tx, busy;
  int checks = 0, failures = 0;

  uart_tx dut (.clk(clk), .rst_n(rst_n), .baud_tick(baud_tick), .start(start),
               .data(data), .tx(tx), .busy(busy));

  always #5 clk = ~clk;

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always_comb baud_tick = (cyc % BIT == BIT - 1);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // receiver
  logic [7:0] rx_q [$];
  initial begin
    forever begin
      int t0, t1;
      logic [7:0] b;
      @(negedge tx);
      t0 = cyc;
      repeat (BIT / 2) @(posedge clk);
      check(tx == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (BIT) @(posedge clk);
        b[i] = tx;
      end
      repeat (BIT) @(posedge clk);
      check(tx == 1'b1, "stop bit");
      rx_q.push_back(b);
      @(posedge busy or negedge busy);   // end of the stop bit
      t1 = cyc;
      check(!busy && (t1 - t0 == 10 * BIT || t1 - t0 == 10 * BIT + 1),
            $sformatf("frame length %0d cycles", t1 - t0));
    end
  end

  logic [7:0] sent [$];
  int ignored = 0;

  initial begin
    start = 0; data = 0; rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (5) @(negedge clk);
    check(tx && !busy, "idle line high");
    for (int k = 0; k < 60; k++) begin
      logic [7:0] d;
      d = (k == 0) ? 8'h55 : (k == 1) ? 8'h00 : (k == 2) ? 8'hFF : 8'($urandom);
      @(negedge clk); start = 1; data = d;
      @(negedge clk); start = 0;
      sent.push_back(d);
      check(busy, "busy after start");
      // a second request in mid-frame must be ignored
      repeat (3 * BIT) @(negedge clk);
      start = 1; data = ~d;
      @(negedge clk); start = 0;
      ignored++;
      while (busy) @(negedge clk);
      check(tx, "line high after frame");
      repeat ($urandom % 40) @(negedge clk);
    end
    repeat (2 * BIT) @(negedge clk);
    check(rx_q.size() == sent.size(), $sformatf("frames %0d sent %0d", rx_q.size(), sent.size()));
    while (rx_q.size() > 0 && sent.size() > 0) begin
      logic [7:0] r, s;
      r = rx_q.pop_front(); s = sent.pop_front();
      check(r == s, $sformatf("received %h sent %h", r, s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
