// xoroshiro128aox -- hardware pseudorandom number generator, 64 bits per cycle.
//
// The generator holds 128 bits of state {s1, s0} in registers. Every cycle the
// AOX scrambler (aox_output) turns the current state into a 64-bit random word,
// and the xoroshiro128 transition (xoro_state_update) computes the next state.
// Both are shallow (a handful of gate levels) so a full step fits in one clock
// cycle, giving one new 64-bit word per cycle. Over the 2^128 - 1 non-zero
// states the sequence has full period; the all-zero state is a fixed point and
// must not be loaded.
//
// Interface
//   clk_i, rst_ni   clock; asynchronous active-low reset loads RESET_SEED.
//   seed_load_i     when high at a rising edge, seed_i {s1, s0} becomes the state.
//                   It takes priority over advance_i. A zero seed is illegal.
//   advance_i       when high at a rising edge (and no seed load), the word on
//                   rand_o is taken as consumed and the state steps once.
//                   When low the state and rand_o hold.
//   rand_o          AOX output of the current state, valid every cycle.
// Timing: rand_o is combinational from the state registers; the word returned
// for the k-th advance is the one visible in the cycle of that advance, which
// matches the software definition (output computed from the state before the
// update). A new seed is visible on rand_o in the cycle after seed_load_i.
//
// The state update, output function, constants and the single-cycle step with
// state in registers follow the published generator. The seed/advance
// handshake, the reset seed (s0 = 1, s1 = all ones, the seed the authors use
// for their Hamming-weight test) and the zero-seed assertion are this design's
// own choices.
module xoroshiro128aox
  import xoro_pkg::*;
#(
  parameter int unsigned ROT_A      = ROT_A_2016,
  parameter int unsigned SHIFT_B    = SHIFT_B_2016,
  parameter int unsigned ROT_C      = ROT_C_2016,
  parameter xoro_state_t RESET_SEED = '{s1: '1, s0: word_t'(1)}
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        seed_load_i,
  input  xoro_state_t seed_i,
  input  logic        advance_i,
  output word_t       rand_o
);

  xoro_state_t state_q;
  xoro_state_t state_next;

  xoro_state_update #(
    .ROT_A  (ROT_A),
    .SHIFT_B(SHIFT_B),
    .ROT_C  (ROT_C)
  ) u_update (
    .state_i(state_q),
    .state_o(state_next)
  );

  aox_output #(
    .W(XORO_W)
  ) u_aox (
    .s0_i(state_q.s0),
    .s1_i(state_q.s1),
    .r_o (rand_o)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= RESET_SEED;
    end else if (seed_load_i) begin
      state_q <= seed_i;
    end else if (advance_i) begin
      state_q <= state_next;
    end
  end

  // The all-zero state never leaves itself: refuse to be seeded with it.
  a_seed_nonzero: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   seed_load_i |-> (seed_i != '0))
    else $error("xoroshiro128aox: all-zero seed loaded");

  initial begin
    assert (RESET_SEED != '0) else $error("xoroshiro128aox: RESET_SEED must be non-zero");
  end

endmodule
