// tb_seg10_display_top -- end-to-end check of the 10-segment driver.
//
// Drives every BCD code in both modes, in order and then in a random walk
// that switches mode while holding the digit. Bengali expectations come
// from the combination vectors (the set of lit segments per numeral, with
// segment i in digit 8 as the truth table has it); English ones from the
// customary 7-segment digits. Bengali codes 10..15 are don't-cares and only
// English blanking is checked for them. Counted mechanisms: digits shown
// in Bengali mode, in English mode, and mode switches with the digit held;
// each must happen at least once. Outputs are sampled 1 ns after each input
// change (the design is combinational). A watchdog ends the run with a
// failure.
`timescale 1ns/1ps
module tb_seg10_display_top;

  logic [3:0] bcd;
  logic       mode;
  logic [9:0] seg;
  int checks   = 0;
  int failures = 0;
  int n_bengali = 0, n_english = 0, n_switch = 0;

  seg10_display_top dut (.bcd(bcd), .mode(mode), .seg(seg));

  localparam string BENGALI [10] = '{
    "abcdef", "acdeghj", "adeghi", "bdefhj", "abcdefg",
    "abdefij", "bdefij", "abcfg", "cdefgi", "aceghj"
  };
  localparam string ENGLISH [10] = '{
    "abcdef", "bc", "abdeg", "abcdg", "bcfg",
    "acdfg", "acdefg", "abc", "abcdefg", "abcdfg"
  };

  function automatic logic [9:0] from_names(input string s);
    logic [9:0] r = '0;
    for (int k = 0; k < s.len(); k++)
      if (s[k] != " ") r[9 - (s[k] - "a")] = 1'b1;
    return r;
  endfunction

  task automatic apply(input logic [3:0] d, input logic m);
    logic [9:0] want;
    if (m != mode && d == bcd) n_switch++;
    bcd  = d;
    mode = m;
    #1;
    if (m) begin
      n_english++;
      want = (d < 10) ? from_names(ENGLISH[d]) : '0;
      checks++;
      if (seg !== want) begin
        failures++;
        $display("FAIL english code %0d: got %b want %b", d, seg, want);
      end
    end else if (d < 10) begin
      n_bengali++;
      want = from_names(BENGALI[d]);
      checks++;
      if (seg !== want) begin
        failures++;
        $display("FAIL bengali digit %0d: got %b want %b", d, seg, want);
      end
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bcd  = '0;
    mode = 1'b0;
    #1;
    for (int d = 0; d < 16; d++) begin
      apply(d[3:0], 1'b0);
      apply(d[3:0], 1'b1);
    end
    for (int k = 0; k < 500; k++) begin
      if ($urandom_range(0, 2) == 0) apply(bcd, ~mode);
      else apply(4'($urandom_range(0, 15)), 1'($urandom_range(0, 1)));
    end
    $display("mechanisms: bengali=%0d english=%0d mode_switch=%0d",
             n_bengali, n_english, n_switch);
    checks++;
    if (n_bengali == 0 || n_english == 0 || n_switch == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
