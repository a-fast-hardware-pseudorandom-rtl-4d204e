// tb_interleaved -- interleaved parallel generators workload.
//
// A chip carries one generator per processor, so many generators run side by
// side from different seeds. This test instantiates NGEN = 1000 copies of the
// generator and reads them round-robin with an interleave factor of one: in
// each clock cycle exactly one generator is advanced and its word is appended
// to the combined stream, while all the others stall. Three phases use the
// first 10, 100 and 1000 generators, each phase reseeding its generators with
// random non-zero seeds (held in a software model) and then producing ROUNDS
// words from each. Every word of the combined stream is compared with the
// model, and the overall fraction of set bits is checked to lie within
// 0.5 +- 0.01.
module tb_interleaved;
  import xoro_pkg::*;

  localparam int NGEN   = 1000;
  localparam int ROUNDS = 200;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        seed_load [NGEN];
  logic        advance   [NGEN];
  xoro_state_t seed;
  word_t       rand_w    [NGEN];

  always #5 clk = ~clk;

  for (genvar g = 0; g < NGEN; g++) begin : gen_prng
    xoroshiro128aox u_prng (
      .clk_i      (clk),
      .rst_ni     (rst_n),
      .seed_load_i(seed_load[g]),
      .seed_i     (seed),
      .advance_i  (advance[g]),
      .rand_o     (rand_w[g])
    );
  end

  int checks   = 0;
  int failures = 0;
  int mismatches = 0;
  longint ones = 0, bits = 0;

  logic [63:0] m_s0 [NGEN];
  logic [63:0] m_s1 [NGEN];

  function automatic logic [63:0] rl(input logic [63:0] x, input int k);
    return (x << k) | (x >> (64 - k));
  endfunction

  task automatic run_phase(input int n);
    logic [63:0] x, a, expw;
    int mism_base;
    mism_base = mismatches;
    // reseed generators 0..n-1, one per cycle
    for (int g = 0; g < n; g++) begin
      @(negedge clk);
      foreach (seed_load[i]) seed_load[i] = 1'b0;
      seed.s0 = {$urandom, $urandom};
      seed.s1 = {$urandom, $urandom};
      if (seed == '0) seed.s0 = 64'd1;
      seed_load[g] = 1'b1;
      m_s0[g] = seed.s0;
      m_s1[g] = seed.s1;
    end
    @(negedge clk);
    foreach (seed_load[i]) seed_load[i] = 1'b0;
    // round-robin read-out
    for (int r = 0; r < ROUNDS; r++) begin
      for (int g = 0; g < n; g++) begin
        advance[(g + n - 1) % n] = 1'b0;
        advance[g] = 1'b1;
        #4;
        x    = m_s0[g] ^ m_s1[g];
        a    = m_s0[g] & m_s1[g];
        expw = x ^ (rl(a, 1) | rl(a, 2));
        if (rand_w[g] !== expw) begin
          mismatches++;
          if (mismatches < 5) $display("FAIL gen %0d round %0d: %h vs %h", g, r, rand_w[g], expw);
        end
        ones += longint'($countones(rand_w[g]));
        bits += 64;
        m_s0[g] = rl(m_s0[g], 55) ^ x ^ (x << 14);
        m_s1[g] = rl(x, 36);
        @(negedge clk);
      end
    end
    foreach (advance[i]) advance[i] = 1'b0;
    checks++;
    if (mismatches != mism_base) failures++;
    $display("N=%0d: %0d interleaved words, %0d mismatches", n, n * ROUNDS, mismatches - mism_base);
  endtask

  initial begin
    real frac;
    rst_n = 1'b1;
    seed  = '0;
    foreach (seed_load[i]) seed_load[i] = 1'b0;
    foreach (advance[i]) advance[i] = 1'b0;
    #1 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    run_phase(10);
    run_phase(100);
    run_phase(NGEN);
    frac = real'(ones) / real'(bits);
    $display("fraction of set bits in the combined streams: %0.5f", frac);
    checks++;
    if (frac < 0.49 || frac > 0.51) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((10 + 100 + NGEN) * (ROUNDS + 1) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
