// tb_bengali_seg_decoder -- exhaustive self-check of the Bengali decoder.
//
// Expected patterns are rebuilt from the per-segment minterm lists (which
// digits light each segment), a different form of the truth table from the
// product terms the decoder uses. All ten digits are applied; each of the
// ten segments of each digit counts as one check. A second pass checks the
// whole 10-bit word against the truth-table rows written out as literals.
// Codes 10..15 are don't-cares of the minimisation and are not checked.
// The decoder is combinational, so outputs are sampled 1 ns after the input
// changes. A watchdog ends the run with a failure if it does not finish.
`timescale 1ns/1ps
module tb_bengali_seg_decoder;
  import seg10_pkg::*;

  bcd_t   bcd;
  seg10_t seg;
  int     checks   = 0;
  int     failures = 0;
  localparam string NAMES = "abcdefghij";

  bengali_seg_decoder dut (.bcd(bcd), .seg(seg));

  // Minterm lists, one bit per digit 9..0, for segments a..j.
  function automatic logic [9:0] minterms(input int s);
    case (s)
      0: return mask('{0, 1, 2, 4, 5, 7, 9});
      1: return mask('{0, 3, 4, 5, 6, 7});
      2: return mask('{0, 1, 4, 7, 8, 9});
      3: return mask('{0, 1, 2, 3, 4, 5, 6, 8});
      4: return mask('{0, 1, 2, 3, 4, 5, 6, 8, 9});
      5: return mask('{0, 3, 4, 5, 6, 7, 8});
      6: return mask('{1, 2, 4, 7, 8, 9});
      7: return mask('{1, 2, 3, 9});
      8: return mask('{2, 5, 6, 8});
      default: return mask('{1, 3, 5, 6, 9});
    endcase
  endfunction

  function automatic logic [9:0] mask(input int m[]);
    logic [9:0] r = '0;
    foreach (m[k]) r[m[k]] = 1'b1;
    return r;
  endfunction

  // Truth-table rows, abcdefghij.
  localparam logic [9:0] ROWS [10] = '{
    10'b1111110000, 10'b1011101101, 10'b1001101110, 10'b0101110101,
    10'b1111111000, 10'b1101110011, 10'b0101110011, 10'b1110011000,
    10'b0011111010, 10'b1010101101
  };

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 10; d++) begin
      bcd = bcd_t'(d[3:0]);
      #1;
      for (int s = 0; s < 10; s++) begin
        logic want, got;
        logic [9:0] mt;
        mt   = minterms(s);
        want = mt[d];
        got  = seg[9 - s];
        checks++;
        if (got !== want) begin
          failures++;
          $display("FAIL digit %0d segment %s: got %b want %b", d, string'(NAMES[s]), got, want);
        end
      end
    end
    for (int d = 0; d < 10; d++) begin
      bcd = bcd_t'(d[3:0]);
      #1;
      checks++;
      if (seg !== ROWS[d]) begin
        failures++;
        $display("FAIL digit %0d: got %b want %b", d, seg, ROWS[d]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
