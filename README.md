# A ten-segment driver for Bengali and English numerals

Bengali digits (০ ১ ২ ৩ ৪ ৫ ৬ ৭ ৮ ৯) have hooks and tails that a
seven-segment display cannot draw. Earlier segment displays for them used
bent segments, or straight segments of different lengths. Bent segments are
costly to make. Segments of different lengths draw different currents, so
each one needs its own resistor value. The display implemented here uses
ten straight segments, all the same size. Seven of them are the familiar
seven-segment digit. The other three are strokes placed to the right of it.
Because every segment is the same, every LED gets the same drive.

The logic in this repository turns one BCD digit into the ten segment
enables. It is a small combinational circuit: two decoders and a selector.

## The segments

```
      ___a___      \
     |       |      \  h
   f |       | b     \
     |___g___|   ____i____
     |       |     /
   e |       | c  /  j
     |___d___|   /
```

Segments a..g sit where they do on a seven-segment digit: a at the top,
b upper right, c lower right, d at the bottom, e lower left, f upper left,
g in the middle. Segment h is a diagonal falling from the upper right. i is
a horizontal bar at mid-height. j is a diagonal rising to the lower right.

In the RTL the ten enables form the packed struct `seg10_t`. Bit 9 is a and
bit 0 is j, so a 10-bit literal reads left to right as `abcdefghij`. A 1
lights the segment. The input digit is the struct `bcd_t` = {w, x, y, z},
with w the most significant bit (weight 8).

## Bengali patterns

| digit | w x y z | a b c d e f g h i j | lit segments |
|---|---|---|---|
| 0 ০ | 0000 | 1111110000 | a b c d e f |
| 1 ১ | 0001 | 1011101101 | a c d e g h j |
| 2 ২ | 0010 | 1001101110 | a d e g h i |
| 3 ৩ | 0011 | 0101110101 | b d e f h j |
| 4 ৪ | 0100 | 1111111000 | a b c d e f g |
| 5 ৫ | 0101 | 1101110011 | a b d e f i j |
| 6 ৬ | 0110 | 0101110011 | b d e f i j |
| 7 ৭ | 0111 | 1110011000 | a b c f g |
| 8 ৮ | 1000 | 0011111010 | c d e f g i |
| 9 ৯ | 1001 | 1010101101 | a c e g h j |

Codes 10 to 15 are not digits. The logic minimisation treats them as
don't-cares, and the circuit does nothing to blank them: it shows whatever
its product terms produce.

### The gate network (`rtl/bengali_seg_decoder.sv`)

Each segment is a two-level sum of products over w, x, y, z and their
inverses. It uses only inverters, AND gates and OR gates. After synthesis
the network has 4 inverters, 21 AND and 23 OR cells (counted as two-input
operations).

```
a = w'y' + wz + xyz + x'yz'
b = x + yz + w'y'z'
c = w + x'y' + y'z' + xyz
d = w'x' + z' + xy'
e = z' + x' + y'
f = x + y'z' + yz
g = w + xy'z' + x'y'z + x'yz' + xyz
h = x'y + x'z
i = yz' + xy'z + wy'z'
j = x'z + y'z + xyz'
```

**Two of these equations differ from the published minimisation.** The
source gives `c = w + y' + xyz`, which would also light c for digit 5. It
gives `g = w + xy'z' + x'y'z + x'yz'`, which would leave g dark for digit
7. The truth table, the per-segment minterm lists and the per-digit segment
sets of the same source all agree on c(5) = 0 and g(7) = 1. So this design
uses a correct cover for c and adds the missing term `xyz` to g. Note that
g is simply w + (x XOR y XOR z).

A third inconsistency in the source is the segment set listed for digit 8.
It omits i. The truth table, the minterm list for i and the printed
equation for i all light it. This design lights i for 8.

## English mode (`rtl/english_seg_decoder.sv`)

If h, i and j stay dark, segments a..g form an ordinary seven-segment digit,
so the same display can show 0-9 in Western form. The source states only
that principle and gives no patterns. The patterns used are the customary
ones:

| digit | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|---|
| lit | abcdef | bc | abdeg | abcdg | bcfg | acdfg | acdefg | abc | abcdefg | abcdfg |

In this mode codes 10 to 15 blank the display. That is a choice made here,
not something the source specifies. The decoder is a `case` table, and
synthesis maps it to a 16 x 7 ROM.

## Top level (`rtl/seg10_display_top.sv`)

| port | dir | width | meaning |
|---|---|---|---|
| `bcd` | in | 4 | {w, x, y, z}, w the MSB |
| `mode` | in | 1 | 0 = Bengali, 1 = English (`disp_mode_e`) |
| `seg` | out | 10 | enables a (bit 9) .. j (bit 0), 1 = lit |

Both decoders are always active. `mode` drives a 10-bit multiplexer that
picks one of their outputs. The circuit has no clock, no reset and no state.
`seg` is valid one gate-network delay after `bcd` or `mode` changes. If the
digit must be held, register it outside this block.

The mode input and the multiplexer are this design's way of giving "one
circuit for both numeral sets". The source does not describe how the
selection is made.

## Outside the logic: LEDs and resistors

Each `seg` line drives one LED segment through a series resistor. For an
LED that needs about 2 V at 20 mA, the resistor is R = (Vs − 2 V) / 0.02 A.
All segments are the same size, so every resistor has the same value. This
is the practical gain of the uniform layout over displays with mixed segment
lengths. The polarity of `seg` (1 = lit) suits a common-cathode display
driven from active-high outputs. For a common-anode part, invert it.

The RTL does not model the LEDs, the resistors, or any pulsed
(higher-current, low-duty) drive.

## Verification

| testbench | what it does |
|---|---|
| `tb/tb_bengali_seg_decoder.sv` | All ten digits. Each of the 100 segment values is compared with the minterm lists (which digits light each segment). Then each full word is compared with the truth-table rows. |
| `tb/tb_english_seg_decoder.sv` | All 16 codes. Patterns are built from the segment-name strings above. Checks that codes 10-15 blank and that h, i, j never light. |
| `tb/tb_seg10_display_top.sv` | End to end. Runs every code in both modes, then 500 random steps. Some steps flip the mode while holding the digit. Bengali expectations come from the per-digit segment sets. The run counts Bengali digits, English digits and mode switches, and fails if any count is zero. |

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself
after a watchdog time. To run one with Verilator:

```
verilator --binary --timing -Wall -Wno-fatal --top-module tb_seg10_display_top \
    -y rtl -y tb +libext+.sv rtl/seg10_pkg.sv tb/tb_seg10_display_top.sv
./obj_dir/Vtb_seg10_display_top
```

Each testbench also fails on a broken decoder. For example, the Bengali
testbench catches the published equation for c: two failures, for
segment c of digit 5.

## Changing it

- To use other glyphs, edit the equations in `bengali_seg_decoder.sv` or the
  table in `english_seg_decoder.sv`. Update the expected strings in the
  testbenches to match.
- To force blanking of codes 10-15 in Bengali mode, add a gate with
  `!(w & (x | y))`. The top-level testbench does not check those codes in
  Bengali mode.
- To add a digit register or a multi-digit multiplexed display, wrap
  `seg10_display_top`. Neither is part of this design.
