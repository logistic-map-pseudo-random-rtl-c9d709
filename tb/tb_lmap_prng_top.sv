// tb_lmap_prng_top: end-to-end test of the whole PRNG design at reduced clock rates.
//
// The system clock is scaled down to 96 kHz, which keeps all rates of the design (1 Hz PRNG
// update, 500 Hz scan, 9600 baud, 100 Hz bytes) but makes a simulated second 96,000 cycles.
// An ADC model stands in for the on-chip converter. The test
//   - holds the PRNG button (rstn) for a while, so the seed is refreshed from the ADC, then
//     releases it and checks that the PRNG starts from the seed it held at release;
//   - checks every new iterate and average against an independent 64-bit model of the
//     rescaled logistic map and the EWMA;
//   - checks that one new value appears every two 1 Hz ticks;
//   - checks that the display register takes the PRNG output on each tick, and decodes the
//     segment and digit lines back into that number;
//   - decodes the serial line (8N1 at 9600 baud), pairs the bytes low-then-high and checks
//     that every byte belongs to a PRNG output;
//   - presses the button again while the ADC reads 0, and checks the reseed from seed 1.
// Each of these mechanisms is counted; one that never happened counts as a failure.
module tb_lmap_prng_top;
  localparam int unsigned CLK_HZ  = 96_000;
  localparam int unsigned BIT     = CLK_HZ / 9600;
  localparam int unsigned SEC     = CLK_HZ;
  localparam int          N_RUN1  = 40;       // outputs after the first release
  localparam int          N_RUN2  = 10;       // outputs after the reseed from zero
  localparam longint      LIMIT   = 64'd120 * SEC;

  logic        clk = 0;
  logic        sys_rstn, rstn, rstn2;
  logic        eoc, drdy, den, dwe, force_zero;
  logic [15:0] do_out, di, sample;
  logic [6:0]  daddr, last_addr;
  logic [6:0]  seg;
  logic [3:0]  an;
  logic        dp, txd;

  lmap_prng_top #(.SYSCLK_HZ(CLK_HZ)) dut (
    .sysclk(clk), .sys_rstn(sys_rstn), .rstn(rstn), .rstn2(rstn2),
    .xadc_eoc(eoc), .xadc_drdy(drdy), .xadc_do(do_out),
    .xadc_den(den), .xadc_dwe(dwe), .xadc_daddr(daddr), .xadc_di(di),
    .seg(seg), .an(an), .dp(dp), .uart_txd(txd));

  xadc_model #(.EOC_PERIOD(CLK_HZ / 100), .DRDY_LAT(4), .ZERO_EVERY(1000)) adc (
    .clk(clk), .den(den), .dwe(dwe), .daddr(daddr), .force_zero(force_zero),
    .eoc(eoc), .drdy(drdy), .do_out(do_out), .sample(sample), .last_addr(last_addr));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // ---- mechanism counters
  int n_adc_reads = 0, n_seed_adc = 0, n_seed_zero = 0, n_reseed = 0, n_outputs = 0;
  int n_display = 0, n_digit [4] = '{0, 0, 0, 0}, n_lo = 0, n_hi = 0, n_clean = 0;

  // ---- watchdog
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (cyc > LIMIT) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  // ---- reference model of the PRNG
  longint mx, ma;
  longint ticks_since_out;
  logic [15:0] outs [$];          // every PRNG output and seed seen, for the serial check

  function automatic longint lmap(input longint x);
    return (4 * x * (65535 - x) + 32767) / 65535;
  endfunction

  logic prng_rst_q = 1'b0;
  always @(posedge clk) begin
    prng_rst_q <= dut.prng_rst_n;
    if (den) n_adc_reads++;
    // seed register update
    if (dut.sys_rst_n && dut.tick_1hz) begin
      @(negedge clk);
      if (dut.adc_data == 16'd0) begin
        check(dut.seed == 16'd1, "zero reading gives seed 1");
        n_seed_zero++;
      end else begin
        check(dut.seed == dut.adc_data, "seed follows the ADC");
      end
    end
  end

  // PRNG release, outputs and rate
  always @(posedge clk) begin
    if (dut.prng_rst_n && !prng_rst_q) begin
      // first cycle out of reset: the core holds the seed
      mx = longint'(dut.seed); ma = longint'(dut.seed);
      check(dut.xt == dut.seed && dut.disp == dut.seed, "PRNG starts from the seed");
      if (dut.seed != 16'd1) n_seed_adc++;
      n_reseed++;
      ticks_since_out = 0;
      outs.push_back(dut.seed);
    end
    if (dut.prng_rst_n && dut.tick_1hz) ticks_since_out++;
    // while the button is held the output follows the seed, and the serial link sends it
    if (!dut.prng_rst_n && (outs.size() == 0 || dut.disp != outs[$])) outs.push_back(dut.disp);
    if (dut.prng_rst_n && dut.prng_valid) begin
      mx = lmap(mx);
      ma = (40 * ma + 10 * mx) / 50;
      check(dut.xt == 16'(mx), $sformatf("iterate %h expected %h", dut.xt, 16'(mx)));
      check(dut.disp == 16'(ma), $sformatf("output %h expected %h", dut.disp, 16'(ma)));
      check(ticks_since_out == 2, $sformatf("%0d ticks per output", ticks_since_out));
      ticks_since_out = 0;
      n_outputs++;
      outs.push_back(16'(ma));
    end
  end

  // display register and segment lines
  logic [15:0] disp_at_tick;
  bit          disp_chk = 0;
  logic [15:0] shown_q;
  int          stable = 0;
  string lit [16] = '{"abcdef", "bc", "abdeg", "abcdg", "bcfg", "acdfg", "acdefg", "abc",
                      "abcdefg", "abcdfg", "abcefg", "cdefg", "adef", "bcdeg", "adefg", "aefg"};
  function automatic int decode(input logic [6:0] s_n);
    for (int d = 0; d < 16; d++) begin
      logic [6:0] p = '0;
      for (int i = 0; i < lit[d].len(); i++) p[3'(lit[d][i] - "a")] = 1'b1;
      if (p == ~s_n) return d;
    end
    return -1;
  endfunction

  always @(posedge clk) begin
    if (disp_chk) begin
      check(dut.displayed_number_r == disp_at_tick, "display takes the PRNG output");
      n_display++;
      disp_chk = 0;
    end
    if (dut.prng_rst_n && dut.tick_1hz) begin
      disp_at_tick = dut.disp;
      disp_chk = 1;
    end
    stable = (dut.displayed_number_r == shown_q) ? stable + 1 : 0;
    shown_q = dut.displayed_number_r;
    // one look per digit, just before the scan moves on
    if (dut.sys_rst_n && dut.tick_scan && stable > 3 && an != 4'hF) begin
      automatic int d = -1;
      for (int i = 0; i < 4; i++) if (!an[i]) d = (d == -1) ? i : -2;
      check(d >= 0, "one digit lit");
      if (d >= 0) begin
        check(decode(seg) == int'(shown_q[4*d +: 4]),
              $sformatf("digit %0d shows %0d, number %h", d, decode(seg), shown_q));
        n_digit[d]++;
      end
    end
  end

  // serial receiver: bytes alternate low, high after rstn2 is released
  function automatic bit is_lo(input logic [7:0] b);
    foreach (outs[i]) if (outs[i][7:0] == b) return 1;
    return (b == 8'h00);
  endfunction
  function automatic bit is_hi(input logic [7:0] b);
    foreach (outs[i]) if (outs[i][15:8] == b) return 1;
    return (b == 8'h00);
  endfunction
  function automatic bit is_word(input logic [15:0] w);
    foreach (outs[i]) if (outs[i] == w) return 1;
    return 0;
  endfunction

  initial begin
    int nbyte;
    logic [7:0] lo, b;
    nbyte = 0;
    wait (dut.ser_rst_n === 1'b0);
    wait (dut.ser_rst_n === 1'b1);
    forever begin
      @(negedge txd);
      repeat (BIT / 2) @(posedge clk);
      check(txd == 1'b0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (BIT) @(posedge clk);
        b[i] = txd;
      end
      repeat (BIT) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      if (nbyte % 2 == 0) begin
        lo = b;
        check(is_lo(b), $sformatf("low byte %h is from a PRNG output", b));
        n_lo++;
      end else begin
        check(is_hi(b), $sformatf("high byte %h is from a PRNG output", b));
        n_hi++;
        if (is_word({b, lo}) && {b, lo} != 16'h0000) n_clean++;
      end
      nbyte++;
    end
  end

  task automatic wait_outputs(input int n);
    int target = n_outputs + n;
    while (n_outputs < target) @(posedge clk);
  endtask

  initial begin
    // drive the resets high and then low before the first clock edge, so that the
    // asynchronous reset of every synchronizer sees a falling edge
    sys_rstn = 1; rstn = 1; rstn2 = 1; force_zero = 0;
    #1;
    sys_rstn = 0; rstn = 0; rstn2 = 0;
    repeat (10) @(negedge clk);
    sys_rstn = 1; rstn2 = 1;
    // hold the button for 2.5 s: the seed is refreshed from the ADC meanwhile
    repeat (5 * SEC / 2) @(negedge clk);
    rstn = 1;
    wait_outputs(N_RUN1);
    // press the button again while the microphone reads zero
    force_zero = 1;
    rstn = 0;
    repeat (3 * SEC / 2) @(negedge clk);
    rstn = 1;
    repeat (SEC / 10) @(negedge clk);
    force_zero = 0;
    wait_outputs(N_RUN2);
    repeat (SEC / 20) @(negedge clk);
    check(last_addr == 7'h1C && !dwe, "ADC reads use the microphone channel");
    check(n_adc_reads > 0,  $sformatf("ADC reads: %0d", n_adc_reads));
    check(n_seed_adc > 0,   $sformatf("seeds taken from the ADC: %0d", n_seed_adc));
    check(n_seed_zero > 0,  $sformatf("zero readings replaced by 1: %0d", n_seed_zero));
    check(n_reseed == 2,    $sformatf("PRNG releases: %0d", n_reseed));
    check(n_outputs == N_RUN1 + N_RUN2, $sformatf("PRNG outputs: %0d", n_outputs));
    check(n_display > 0,    $sformatf("display refreshes: %0d", n_display));
    for (int i = 0; i < 4; i++) check(n_digit[i] > 0, $sformatf("digit %0d scans: %0d", i, n_digit[i]));
    check(n_lo > 0 && n_hi > 0, $sformatf("serial bytes: %0d low, %0d high", n_lo, n_hi));
    check(n_clean > 0,      $sformatf("serial words equal to a PRNG output: %0d", n_clean));
    $display("mechanisms: adc_reads=%0d seed_adc=%0d seed_zero=%0d releases=%0d outputs=%0d display=%0d digits=%0d/%0d/%0d/%0d bytes=%0d/%0d clean_words=%0d",
             n_adc_reads, n_seed_adc, n_seed_zero, n_reseed, n_outputs, n_display,
             n_digit[0], n_digit[1], n_digit[2], n_digit[3], n_lo, n_hi, n_clean);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
