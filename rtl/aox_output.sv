// aox_output -- the AOX (AND-OR-XOR) output scrambler of xoroshiro128aox.
//
// An F2-linear generator such as xoroshiro128 fails tests for linearity if its
// state is output directly. AOX hides the linearity with a cheap non-linear
// function of the two state words. Output bit i is
//     r[i] = s0[i] ^ s1[i] ^ ( (s0[i-1] & s1[i-1]) | (s0[i-2] & s1[i-2]) )
// with indices taken modulo W. Equivalently, with sx = s0 ^ s1 and
// sa = s0 & s1: r = sx ^ (rotl(sa,1) | rotl(sa,2)). Every output bit depends
// on the same six input bits in the same pattern, unlike an adder whose high
// bits depend on all lower bits; the circuit is one AND, one OR and two XOR
// levels per bit, with no carry chain.
//
// Interface: s0_i and s1_i are the current state words; r_o is the random word.
// Timing: purely combinational.
//
// The function and the 64-bit width follow the xoroshiro128aox definition.
// The width is a parameter so that the same scrambler can be studied at small
// sizes (for example an exhaustive check of output uniformity); this is an
// addition for analysis, the generator always uses W = 64.
module aox_output #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] s0_i,
  input  logic [W-1:0] s1_i,
  output logic [W-1:0] r_o
);

  initial begin
    assert (W >= 3) else $error("aox_output: W must be at least 3");
  end

  logic [W-1:0] sx;     // s0 ^ s1
  logic [W-1:0] sa;     // s0 & s1
  logic [W-1:0] sa_r1;  // sa rotated left by 1
  logic [W-1:0] sa_r2;  // sa rotated left by 2

  always_comb begin
    sx    = s0_i ^ s1_i;
    sa    = s0_i & s1_i;
    sa_r1 = {sa[W-2:0], sa[W-1]};
    sa_r2 = {sa[W-3:0], sa[W-1:W-2]};
    r_o   = sx ^ (sa_r1 | sa_r2);
  end

endmodule
