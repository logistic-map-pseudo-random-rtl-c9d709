// xadc_model: behavioural stand-in for the FPGA's on-chip ADC, seen through its DRP port.
//
// Not synthesizable logic: a testbench model of the vendor ADC block. It raises `eoc` for one
// cycle every EOC_PERIOD clocks, as a continuously converting ADC does. It answers a DRP read
// (den high, dwe low) after DRDY_LAT clocks with a one-cycle drdy and the current sample on
// do_out. The samples come from a 16-bit linear feedback shift register, one new sample per
// conversion. Every ZERO_EVERY-th conversion returns 0, so that a test can see the seed logic
// replace a zero reading. It records the address of the last read in last_addr.
module xadc_model #(
  parameter int unsigned EOC_PERIOD = 50,
  parameter int unsigned DRDY_LAT   = 4,
  parameter int unsigned ZERO_EVERY = 5
) (
  input  logic        clk,
  input  logic        den,
  input  logic        dwe,
  input  logic [6:0]  daddr,
  input  logic        force_zero,
  output logic        eoc,
  output logic        drdy,
  output logic [15:0] do_out,
  output logic [15:0] sample,       // value the next read will return
  output logic [6:0]  last_addr
);
  int unsigned cyc = 0;
  int unsigned conv = 0;
  int          pending = -1;
  logic [15:0] lfsr = 16'hACE1;

  initial begin
    eoc = 0; drdy = 0; do_out = 0; sample = 0; last_addr = 0;
  end

  always @(posedge clk) begin
    cyc  <= cyc + 1;
    eoc  <= 1'b0;
    drdy <= 1'b0;
    if (cyc % EOC_PERIOD == EOC_PERIOD - 1) begin
      conv <= conv + 1;
      lfsr <= {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
      sample <= (force_zero || (conv + 1) % ZERO_EVERY == 0) ? 16'd0 : lfsr;
      eoc  <= 1'b1;
    end
    if (den && !dwe) begin
      pending   <= int'(DRDY_LAT);
      last_addr <= daddr;
    end else if (pending > 0) begin
      pending <= pending - 1;
    end else if (pending == 0) begin
      pending <= -1;
      drdy    <= 1'b1;
      do_out  <= sample;
    end
  end
endmodule
