// act_lut: non-linear activation lookup table of an LSTM unit.
//
// The paper gives each LSTM unit two lookup tables, one for the sigmoid and
// one for tanh. This module is one of them, chosen by IS_TANH. The 8-bit
// signed fixed-point input (FRAC_BITS fractional bits) addresses a 256-entry
// table whose entries are
//   sigm: round(2^F / (1 + exp(-v / 2^F)))
//   tanh: round(2^F * tanh(v / 2^F))
// clamped to the signed 8-bit range. The table is computed at elaboration by
// a constant function, so it needs no data file; the synthesised result is a
// 256x8 ROM. The table contents and the fixed-point format are this design's
// choice: the paper names the functions but not their resolution.
// Purely combinational, no clock.
module act_lut
  import chipmunk_pkg::*;
#(
  parameter bit IS_TANH = 1'b0
) (
  input  q8_t a,
  output q8_t y
);

  typedef q8_t tab_t [256];

  function automatic tab_t make_table();
    tab_t t;
    for (int k = 0; k < 256; k++) begin
      real v, f;
      int  r;
      v = real'($signed(8'(k))) / real'(1 << FRAC_BITS);
      if (IS_TANH) f = ($exp(v) - $exp(-v)) / ($exp(v) + $exp(-v));
      else         f = 1.0 / (1.0 + $exp(-v));
      r = $rtoi($floor(f * real'(1 << FRAC_BITS) + 0.5));
      if (r > 127)  r = 127;
      if (r < -128) r = -128;
      t[k] = q8_t'(r);
    end
    return t;
  endfunction

  localparam tab_t TABLE = make_table();

  assign y = TABLE[8'(a)];

endmodule
