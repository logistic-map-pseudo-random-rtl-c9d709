// uart_byte_split: cuts the 16-bit PRNG output into the bytes sent over the serial link.
//
// On every `tick` (the byte-processing clock, 100 Hz on the board) the block copies the PRNG
// output into disp_r and toggles `odd`. It also presents one byte of the previous copy in
// tx_data. After reset the low byte comes first and the high byte second, and so on, so a
// receiver that reads byte pairs as little-endian numbers gets the PRNG words back. The
// registers, their reset values and the byte order follow the code in the paper. As there,
// disp_r is refreshed on every tick, so a word that changes between its two bytes is sent as
// a low byte of the old word followed by the high byte of the new one.
//
// Interface: disp (PRNG word), tx_data (byte to send), odd (1 when tx_data is a low byte, i.e.
// the next byte will be a high byte).
// Timing: tx_data changes one clock after each tick.
module uart_byte_split (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  logic [15:0] disp,
  output logic [7:0]  tx_data,
  output logic        odd
);
  logic [15:0] disp_r;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      disp_r  <= '0;
      tx_data <= '0;
      odd     <= 1'b0;
    end else if (tick) begin
      disp_r  <= disp;
      odd     <= !odd;
      tx_data <= odd ? disp_r[15:8] : disp_r[7:0];
    end
  end

endmodule
