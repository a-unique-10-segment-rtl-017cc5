// seg10_pkg -- types shared by the 10-segment numeral decoders.
//
// The display has ten straight segments of equal size, named a..j. Segments
// a..g sit where the segments of an ordinary 7-segment digit sit (a top,
// b upper right, c lower right, d bottom, e lower left, f upper left,
// g middle); h, i and j are three extra strokes to the right of the digit
// (h diagonal at the top, i horizontal at mid-height, j diagonal at the
// bottom). These names and places follow the paper's segment drawing.
//
// A digit enters as four BCD bits {w,x,y,z}, w being the most significant
// (weight 8), as in the paper's truth table. The segment vector is a packed
// struct with a in bit 9 down to j in bit 0, so that a 10-bit literal reads
// in the same a..j order as the truth-table columns. A segment bit of 1
// means the segment is lit; the polarity is this design's choice.
//
// The display mode (Bengali or English numerals) and its encoding are this
// design's own; the paper only states that one display serves both.
package seg10_pkg;

  // One BCD digit, w = MSB (8), z = LSB (1).
  typedef struct packed {
    logic w;
    logic x;
    logic y;
    logic z;
  } bcd_t;

  // One bit per segment, 1 = lit. a is bit 9, j is bit 0.
  typedef struct packed {
    logic a;
    logic b;
    logic c;
    logic d;
    logic e;
    logic f;
    logic g;
    logic h;
    logic i;
    logic j;
  } seg10_t;

  typedef enum logic {
    MODE_BENGALI = 1'b0,
    MODE_ENGLISH = 1'b1
  } disp_mode_e;


endpackage : seg10_pkg
