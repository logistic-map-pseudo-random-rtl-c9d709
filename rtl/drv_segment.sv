// drv_segment: shows a 16-bit value as four hexadecimal digits on a multiplexed 7-segment
// display.
//
// The four digits share the segment lines and are lit one at a time. Each `tick` (500 Hz on
// the board) moves to the next digit. The digit enable `an` selects it, and `seg` carries the
// hexadecimal glyph of the matching nibble. Digit 0 (an[0]) shows value[3:0], the rightmost
// digit, and digit 3 shows value[15:12]. seg[0] is segment a and seg[6] is segment g, in the
// usual a..g order. The decimal point is kept dark.
// That the value is shown in hex on four digits, scanned by a 500 Hz clock, follows the
// paper. The polarity (ACTIVE_LOW, common-anode parts with low-active digit drivers), the
// digit order and the glyphs are this design's choices.
//
// Timing: seg and an are registered and change one clock after a tick (or a value change).
module drv_segment #(
  parameter bit ACTIVE_LOW = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tick,
  input  logic [15:0] value,
  output logic [6:0]  seg,
  output logic [3:0]  an,
  output logic        dp
);
  logic [1:0] digit;
  logic [3:0] nibble;
  logic [6:0] glyph;   // active-high segments g..a

  always_comb begin
    nibble = value[4*digit +: 4];
    unique case (nibble)
      4'h0: glyph = 7'b0111111;
      4'h1: glyph = 7'b0000110;
      4'h2: glyph = 7'b1011011;
      4'h3: glyph = 7'b1001111;
      4'h4: glyph = 7'b1100110;
      4'h5: glyph = 7'b1101101;
      4'h6: glyph = 7'b1111101;
      4'h7: glyph = 7'b0000111;
      4'h8: glyph = 7'b1111111;
      4'h9: glyph = 7'b1101111;
      4'hA: glyph = 7'b1110111;
      4'hB: glyph = 7'b1111100;
      4'hC: glyph = 7'b0111001;
      4'hD: glyph = 7'b1011110;
      4'hE: glyph = 7'b1111001;
      4'hF: glyph = 7'b1110001;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      digit <= '0;
      seg   <= ACTIVE_LOW ? 7'h7F : 7'h00;
      an    <= ACTIVE_LOW ? 4'hF : 4'h0;
      dp    <= ACTIVE_LOW;
    end else begin
      if (tick) digit <= digit + 1'b1;
      seg <= ACTIVE_LOW ? ~glyph : glyph;
      an  <= ACTIVE_LOW ? ~(4'b0001 << digit) : (4'b0001 << digit);
      dp  <= ACTIVE_LOW;
    end
  end

endmodule
