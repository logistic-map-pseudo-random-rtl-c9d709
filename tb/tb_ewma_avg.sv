// tb_ewma_avg: self-checking test of the EWMA averager.
// Checks that reset loads the seed, the published trace (seed 0BB8, samples 2CBB, 93A9,
// F9F5, 1796, 55A7 give 1252, 2C30, 5557, 48FD, 4B85), random updates against an independent
// reference (4*avg + x)/5, the one-clock latency and that the average holds while en is low.
module tb_ewma_avg;
  logic        clk = 0;
  logic        rst_n, en;
  logic [15:0] seed, xt, avg;
  int checks = 0, failures = 0;

  ewma_avg dut (.clk(clk), .rst_n(rst_n), .en(en), .seed(seed), .xt(xt), .avg(avg));

  always #5 clk = ~clk;

  task automatic check(input logic [15:0] got, input logic [15:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic update(input logic [15:0] x);
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

  logic [15:0] xs  [5] = '{16'h2CBB, 16'h93A9, 16'hF9F5, 16'h1796, 16'h55A7};
  logic [15:0] avs [5] = '{16'h1252, 16'h2C30, 16'h5557, 16'h48FD, 16'h4B85};
  longint model;

  initial begin
    en = 0; xt = 0; seed = 16'h0BB8; rst_n = 0;
    repeat (2) @(negedge clk);
    check(avg, 16'h0BB8, "seed load");
    rst_n = 1;
    for (int i = 0; i < 5; i++) begin
      update(xs[i]);
      check(avg, avs[i], $sformatf("trace step %0d", i));
    end
    // hold
    @(negedge clk); xt = 16'hFFFF;
    repeat (3) @(negedge clk);
    check(avg, 16'h4B85, "hold with en low");
    // second seed, then random samples against the reference
    @(negedge clk); seed = 16'hFFFF; rst_n = 0;
    @(negedge clk); rst_n = 1;
    check(avg, 16'hFFFF, "seed load max");
    model = 65535;
    for (int i = 0; i < 300; i++) begin
      logic [15:0] x;
      x = 16'($urandom);
      update(x);
      model = (4 * model + longint'(x)) / 5;
      check(avg, 16'(model), $sformatf("random step %0d", i));
    end
    // latency
    @(negedge clk); xt = 16'd0; en = 1;
    model = (4 * model) / 5;
    @(posedge clk); #1;
    check(avg, 16'(model), "one-clock latency");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
