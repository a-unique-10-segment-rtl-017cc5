// tb_english_seg_decoder -- exhaustive self-check of the English decoder.
//
// Expected patterns are written as the names of the lit segments of each
// customary 7-segment digit and turned into a bit vector by the testbench,
// independently of the decoder's literal table. All 16 input codes are
// applied: 0..9 must show their digit, 10..15 must leave every segment
// dark, and segments h, i, j must never light. Outputs are sampled 1 ns
// after each input change. A watchdog ends the run with a failure.
`timescale 1ns/1ps
module tb_english_seg_decoder;
  import seg10_pkg::*;

  bcd_t   bcd;
  seg10_t seg;
  int     checks   = 0;
  int     failures = 0;

  english_seg_decoder dut (.bcd(bcd), .seg(seg));

  localparam string LIT [10] = '{
    "abcdef", "bc", "abdeg", "abcdg", "bcfg",
    "acdfg", "acdefg", "abc", "abcdefg", "abcdfg"
  };

  function automatic logic [9:0] from_names(input string s);
    logic [9:0] r = '0;
    for (int k = 0; k < s.len(); k++) r[9 - (s[k] - "a")] = 1'b1;
    return r;
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int d = 0; d < 16; d++) begin
      logic [9:0] want;
      bcd  = bcd_t'(d[3:0]);
      #1;
      want = (d < 10) ? from_names(LIT[d]) : '0;
      checks++;
      if (seg !== want) begin
        failures++;
        $display("FAIL code %0d: got %b want %b", d, seg, want);
      end
      checks++;
      if ({seg.h, seg.i, seg.j} != 3'b000) begin
        failures++;
        $display("FAIL code %0d: segment h, i or j lit", d);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
