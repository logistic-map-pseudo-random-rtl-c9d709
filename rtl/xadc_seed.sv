// xadc_seed: reads the microphone channel of the on-chip ADC and keeps the PRNG seed.
//
// The ADC (the FPGA's XADC, set up by the vendor's wizard) converts continuously and pulses
// `eoc` at the end of each conversion. On each eoc this block reads the channel's result
// register through the ADC's dynamic reconfiguration port (DRP). It sends a one-cycle read
// request (den high, dwe low, daddr = ADDR), waits for drdy, and captures do_out as adc_data.
// On every `tick` (1 Hz on the board) the latest reading becomes the seed. A reading of zero
// is replaced by one, because a zero seed makes the logistic map stay at zero.
// The zero substitution, the 1 Hz seed update and the use of the full 16-bit result register
// follow the paper. The read sequence (den on eoc, capture on drdy) and the channel address
// (0x1C, the VAUX12 result register) are this design's choices.
//
// Interface: DRP master signals (den, dwe, daddr, di) and the ADC's eoc, drdy and do_out;
// adc_data (last reading), seed (value offered to the PRNG; 1 after reset).
// Timing: a read takes as long as the ADC takes to raise drdy. An eoc that arrives while a
// read is still open is ignored.
module xadc_seed #(
  parameter logic [6:0] ADDR = prng_pkg::XADC_ADDR_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  // DRP of the ADC
  input  logic        eoc,
  input  logic        drdy,
  input  logic [15:0] do_out,
  output logic        den,
  output logic        dwe,
  output logic [6:0]  daddr,
  output logic [15:0] di,
  // results
  output logic [15:0] adc_data,
  output logic [15:0] seed
);
  logic busy;   // a read has been requested and drdy has not come yet

  assign dwe   = 1'b0;
  assign daddr = ADDR;
  assign di    = '0;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      den      <= 1'b0;
      busy     <= 1'b0;
      adc_data <= '0;
      seed     <= 16'd1;
    end else begin
      den <= 1'b0;
      if (!busy && eoc) begin
        den  <= 1'b1;
        busy <= 1'b1;
      end else if (busy && drdy) begin
        busy     <= 1'b0;
        adc_data <= do_out;
      end
      if (tick) seed <= (adc_data == 16'd0) ? 16'd1 : adc_data;
    end
  end

  // DRP rule: only one read open at a time.
  a_one_read: assert property (@(posedge clk) disable iff (!rst_n) den |=> !den);

endmodule
