// english_seg_decoder -- BCD digit to an English (Western Arabic) numeral
// on the 10-segment display.
//
// The paper notes that leaving segments h, i and j dark turns its display
// into an ordinary 7-segment display on segments a..g, so English numerals
// can be shown on the same part. It gives no table for them; the patterns
// below are the customary 7-segment ones (6 with its top bar, 7 as a, b, c,
// 9 with its bottom bar), which is this design's choice. Inputs 10..15 are
// not digits and leave the display blank, also this design's choice.
//
// Purely combinational: seg follows bcd with no clock or latency.
//
// Interface:
//   bcd  in  {w,x,y,z}, w the MSB.
//   seg  out {a..j}, 1 = lit; h, i and j are always 0.
module english_seg_decoder
  import seg10_pkg::*;
(
  input  bcd_t   bcd,
  output seg10_t seg
);

  always_comb begin
    //                    abcdefghij
    unique case (bcd)
      4'd0:    seg = 10'b1111110000;
      4'd1:    seg = 10'b0110000000;
      4'd2:    seg = 10'b1101101000;
      4'd3:    seg = 10'b1111001000;
      4'd4:    seg = 10'b0110011000;
      4'd5:    seg = 10'b1011011000;
      4'd6:    seg = 10'b1011111000;
      4'd7:    seg = 10'b1110000000;
      4'd8:    seg = 10'b1111111000;
      4'd9:    seg = 10'b1111011000;
      default: seg = '0;
    endcase
  end

endmodule : english_seg_decoder
