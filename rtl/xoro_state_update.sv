// xoro_state_update -- next-state function of the xoroshiro128 generator.
//
// xoroshiro128 is an F2-linear generator: its next state is a fixed linear
// (XOR) function of the current one. With sx = s0 ^ s1 the update is
//     s0' = rotl(s0, ROT_A) ^ sx ^ (sx << SHIFT_B)
//     s1' = rotl(sx, ROT_C)
// All shifts and rotates are by constants, so they are only wiring; the logic
// is three 64-bit XOR layers (s0^s1, then a three-input XOR per bit of s0').
// The all-zero state maps to itself, which is why the generator's period is
// 2^128 - 1 and it must never be seeded with zero.
//
// Interface: state_i is the current {s1, s0}; state_o is the next state.
// Timing: purely combinational; the state registers sit in the enclosing
// generator, which applies one update per clock cycle.
//
// The equations and the default constants (55, 14, 36) are those of the
// xoroshiro128aox generator; the alternative set 24/16/37 can be selected by
// parameter. Making the block combinational and separate from the registers is
// this design's partitioning.
module xoro_state_update
  import xoro_pkg::*;
#(
  parameter int unsigned ROT_A   = ROT_A_2016,
  parameter int unsigned SHIFT_B = SHIFT_B_2016,
  parameter int unsigned ROT_C   = ROT_C_2016
) (
  input  xoro_state_t state_i,
  output xoro_state_t state_o
);

  initial begin
    assert (ROT_A > 0 && ROT_A < XORO_W && SHIFT_B > 0 && SHIFT_B < XORO_W &&
            ROT_C > 0 && ROT_C < XORO_W)
      else $error("xoro_state_update: constants must lie in 1..%0d", XORO_W - 1);
  end

  word_t sx;
  word_t s0_rot;

  always_comb begin
    sx            = state_i.s0 ^ state_i.s1;
    s0_rot        = {state_i.s0[XORO_W-1-ROT_A:0], state_i.s0[XORO_W-1:XORO_W-ROT_A]};
    state_o.s0    = s0_rot ^ sx ^ (sx << SHIFT_B);
    state_o.s1    = {sx[XORO_W-1-ROT_C:0], sx[XORO_W-1:XORO_W-ROT_C]};
  end

endmodule
