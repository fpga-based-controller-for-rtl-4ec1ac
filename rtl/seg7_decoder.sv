// seg7_decoder: hexadecimal seven-segment decoder with decimal point.
//
// The 4-bit input d is shown as one of the glyphs 0-9, A, b, C, d, E, F.
// Output s is {dp, g, f, e, d, c, b, a}: bit 0 is segment a, bit 6 segment g,
// bit 7 the decimal point. With ACTIVE_LOW = 1 (the default, for a common-anode
// display) a lit segment is driven 0 and every bit, the decimal point included,
// is inverted; with ACTIVE_LOW = 0 a lit segment is 1.
//
// Purely combinational: s follows d and dp in the same cycle.
//
// From the paper's waveforms: the digit "2" gives s = 36 and "A" gives s = 8
// with the point lit (active low), and the full system shows 63, 6, 102, 109
// for "0", "1", "4", "5" (active high). The segment order and both polarities
// are read from those printed values; the glyphs for b-F are the usual ones.
module seg7_decoder #(
  parameter bit ACTIVE_LOW = 1'b1
) (
  input  logic [3:0] d,     // digit to show
  input  logic       dp,    // 1 lights the decimal point
  output logic [7:0] s      // {dp, g, f, e, d, c, b, a}
);

  logic [6:0] glyph;        // active-high segments g..a

  always_comb begin
    unique case (d)
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

  assign s = ACTIVE_LOW ? ~{dp, glyph} : {dp, glyph};

endmodule
