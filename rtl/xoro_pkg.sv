// xoro_pkg -- types and constants shared by the xoroshiro128aox generator.
//
// The generator keeps 128 bits of state as two 64-bit words, s0 and s1. This
// package defines that state as a packed struct (s1 in the upper half, s0 in
// the lower half -- an ordering chosen here, the algorithm itself does not
// fix one) and the two sets of xoroshiro128 shift/rotate constants:
//   * 55 / 14 / 36: the 2016 constants of xoroshiro128+, the set the silicon
//     generator uses and this design's default;
//   * 24 / 16 / 37: the constants later recommended by the xoroshiro authors,
//     which behave the same statistically and are kept as an option.
package xoro_pkg;

  localparam int unsigned XORO_W = 64;  // width of one state word and of the output

  typedef logic [XORO_W-1:0] word_t;

  typedef struct packed {
    word_t s1;
    word_t s0;
  } xoro_state_t;

  // Constant set used by the generator in silicon (default).
  localparam int unsigned ROT_A_2016  = 55;
  localparam int unsigned SHIFT_B_2016 = 14;
  localparam int unsigned ROT_C_2016  = 36;

  // Later recommended constant set.
  localparam int unsigned ROT_A_2018  = 24;
  localparam int unsigned SHIFT_B_2018 = 16;
  localparam int unsigned ROT_C_2018  = 37;

endpackage
