// seg10_display_top -- the complete 10-segment numeral driver.
//
// One BCD digit and a mode bit go in; ten segment enables come out, one per
// LED segment a..j. In Bengali mode the digit is decoded by the
// sum-of-products network of bengali_seg_decoder; in English mode by
// english_seg_decoder, which uses only segments a..g. Both decoders run all
// the time and the mode bit selects one of their outputs, so switching mode
// takes effect as soon as the multiplexer settles. The LEDs and their
// series current-limiting resistors are outside this logic and hang on the
// seg port.
//
// Purely combinational; no clock or reset.
//
// Interface:
//   bcd   in  {w,x,y,z}, w the MSB.
//   mode  in  0 = Bengali numerals, 1 = English numerals.
//   seg   out {a..j} as a 10-bit vector, a in bit 9; 1 = lit.
//
// The paper describes one circuit for both numeral sets; the mode input
// and the multiplexer that realise that are this design's choice.
module seg10_display_top
  import seg10_pkg::*;
(
  input  logic [$bits(bcd_t)-1:0]   bcd,
  input  logic                      mode,
  output logic [$bits(seg10_t)-1:0] seg
);

  seg10_t seg_bengali;
  seg10_t seg_english;

  bengali_seg_decoder u_bengali (
    .bcd (bcd_t'(bcd)),
    .seg (seg_bengali)
  );

  english_seg_decoder u_english (
    .bcd (bcd_t'(bcd)),
    .seg (seg_english)
  );

  always_comb begin
    if (disp_mode_e'(mode) == MODE_ENGLISH) seg = seg_english;
    else                                   seg = seg_bengali;
  end

endmodule : seg10_display_top
