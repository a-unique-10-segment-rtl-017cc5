// bengali_seg_decoder -- BCD digit to the ten segments of a Bengali numeral.
//
// Purely combinational: the segment outputs follow the BCD input after the
// gate delays, with no clock, state or latency. Each segment is a two-level
// sum of products over the inputs w, x, y, z and their complements, i.e. a
// network of inverters, AND gates and OR gates, as the paper's circuit does.
//
// Interface:
//   bcd  in  {w,x,y,z}, w the MSB; digits 0..9 are meaningful.
//   seg  out {a..j}, 1 = segment lit.
//
// The product terms are the paper's Karnaugh-map minimisation, with two
// corrections. In the paper's printed expressions, segment c = w + y' + xyz
// would light c for digit 5, and segment g = w + xy'z' + x'y'z + x'yz'
// would leave g dark for digit 7; the paper's truth table, combination
// vectors and minterm lists all agree on c(5) = 0 and g(7) = 1. Here c uses
// w + x'y' + y'z' + xyz and g gains the term xyz, so every digit 0..9 shows
// exactly the truth-table pattern (digit 8 includes segment i, as the truth
// table, minterm list and printed i expression have it).
//
// Inputs 10..15 are not BCD. The minimisation treated them as don't-cares
// and so does this circuit: it shows whatever the product terms give and
// makes no attempt to blank them.
module bengali_seg_decoder
  import seg10_pkg::*;
(
  input  bcd_t   bcd,
  output seg10_t seg
);

  logic w, x, y, z;     // true rails
  logic wn, xn, yn, zn; // inverter outputs

  always_comb begin
    {w, x, y, z} = bcd;
    wn = ~w;
    xn = ~x;
    yn = ~y;
    zn = ~z;
  end

  always_comb begin
    seg.a = (wn & yn) | (w & z) | (x & y & z) | (xn & y & zn);
    seg.b = x | (y & z) | (wn & yn & zn);
    seg.c = w | (xn & yn) | (yn & zn) | (x & y & z);
    seg.d = (wn & xn) | zn | (x & yn);
    seg.e = zn | xn | yn;
    seg.f = x | (yn & zn) | (y & z);
    seg.g = w | (x & yn & zn) | (xn & yn & z) | (xn & y & zn) | (x & y & z);
    seg.h = (xn & y) | (xn & z);
    seg.i = (y & zn) | (x & yn & z) | (w & yn & zn);
    seg.j = (xn & z) | (yn & z) | (x & y & zn);
  end

endmodule : bengali_seg_decoder
