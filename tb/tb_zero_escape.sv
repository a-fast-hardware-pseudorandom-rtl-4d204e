// tb_zero_escape -- "escaping zero land" workload on the full generator.
//
// The generator is seeded in turn with every one-hot 128-bit state (a very
// poor seed: one bit set) and run for STEPS outputs. For each step the number
// of set output bits is summed over all 128 seeds, giving the fraction of set
// bits as a function of the step; a 4-output moving average of it is also
// formed. A good generator climbs quickly from almost no set bits to one half.
// Checks:
//  * every output word matches a software model of the generator;
//  * step 1 has exactly 1/64 of its bits set (a one-hot state with the other
//    word zero yields sx one-hot and no AND terms, so the output is one-hot);
//  * the moving average first reaches 0.45 within ESCAPE_MAX steps (the
//    generator is expected to escape in about a dozen steps);
//  * from step 100 on, every recorded step's fraction, taken over
//    128 x 64 = 8192 bits, lies within 0.5 +- 0.05 (about nine standard
//    deviations).
// The run takes 128 million clock cycles, about a minute of simulation.
// A selection of the curve is printed.
module tb_zero_escape;
  import xoro_pkg::*;

  localparam int STEPS      = 1_000_000;
  localparam int FIRST      = 1000;   // steps recorded individually
  localparam int SAMPLE     = 1000;   // later steps recorded at this interval
  localparam int ESCAPE_MAX = 20;

  logic        clk = 1'b0;
  logic        rst_n;
  logic        seed_load;
  xoro_state_t seed;
  logic        advance;
  word_t       rand_w;

  always #5 clk = ~clk;

  xoroshiro128aox dut (
    .clk_i      (clk),
    .rst_ni     (rst_n),
    .seed_load_i(seed_load),
    .seed_i     (seed),
    .advance_i  (advance),
    .rand_o     (rand_w)
  );

  int checks   = 0;
  int failures = 0;
  int mismatches = 0;
  longint ones [FIRST];             // set bits at steps 1..FIRST
  longint ones_s [STEPS / SAMPLE];  // set bits at steps SAMPLE, 2*SAMPLE, ...

  function automatic logic [63:0] rl(input logic [63:0] x, input int k);
    return (x << k) | (x >> (64 - k));
  endfunction

  initial begin
    logic [63:0] m_s0, m_s1, x, a, expw;
    real frac, avg4;
    int  escape;
    rst_n     = 1'b1;
    seed_load = 1'b0;
    seed      = '0;
    advance   = 1'b0;
    foreach (ones[i]) ones[i] = 0;
    foreach (ones_s[i]) ones_s[i] = 0;
    #1 rst_n = 1'b0;
    #3 rst_n = 1'b1;

    for (int b = 0; b < 128; b++) begin
      @(negedge clk);
      seed_load = 1'b1;
      advance   = 1'b0;
      seed      = xoro_state_t'(128'd1 << b);
      m_s0      = seed.s0;
      m_s1      = seed.s1;
      @(negedge clk);
      seed_load = 1'b0;
      advance   = 1'b1;
      for (int t = 0; t < STEPS; t++) begin
        x    = m_s0 ^ m_s1;
        a    = m_s0 & m_s1;
        expw = x ^ (rl(a, 1) | rl(a, 2));
        if (rand_w !== expw) begin
          mismatches++;
          if (mismatches < 5) $display("FAIL seed bit %0d step %0d: %h vs %h", b, t + 1, rand_w, expw);
        end
        if (t < FIRST) ones[t] += longint'($countones(rand_w));
        if (t % SAMPLE == SAMPLE - 1) ones_s[t / SAMPLE] += longint'($countones(rand_w));
        m_s0 = rl(m_s0, 55) ^ x ^ (x << 14);
        m_s1 = rl(x, 36);
        @(negedge clk);
      end
    end
    checks++;
    if (mismatches != 0) failures++;

    // step 1: exactly one bit set per seed
    checks++;
    if (ones[0] != 128) begin
      failures++;
      $display("FAIL step 1 has %0d set bits over 128 seeds, expected 128", ones[0]);
    end

    escape = -1;
    for (int t = 0; t < FIRST; t++) begin
      frac = real'(ones[t]) / (128.0 * 64.0);
      avg4 = 0.0;
      for (int k = (t >= 3 ? t - 3 : 0); k <= t; k++) avg4 += real'(ones[k]) / (128.0 * 64.0);
      avg4 = avg4 / real'(t >= 3 ? 4 : t + 1);
      if (escape < 0 && avg4 >= 0.45) escape = t + 1;
      if (t < 16 || t == 99 || t == 499 || t == FIRST - 1)
        $display("step %4d  fraction %0.4f  4-avg %0.4f", t + 1, frac, avg4);
      if (t >= 99) begin
        checks++;
        if (frac < 0.45 || frac > 0.55) begin
          failures++;
          $display("FAIL step %0d fraction %0.4f", t + 1, frac);
        end
      end
    end
    for (int j = 0; j < STEPS / SAMPLE; j++) begin
      frac = real'(ones_s[j]) / (128.0 * 64.0);
      if (j % 100 == 99) $display("step %7d  fraction %0.4f", (j + 1) * SAMPLE, frac);
      checks++;
      if (frac < 0.45 || frac > 0.55) begin
        failures++;
        $display("FAIL step %0d fraction %0.4f", (j + 1) * SAMPLE, frac);
      end
    end
    $display("escape step (4-average >= 0.45): %0d", escape);
    checks++;
    if (escape < 1 || escape > ESCAPE_MAX) begin
      failures++;
      $display("FAIL escape step %0d outside 1..%0d", escape, ESCAPE_MAX);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (128 * (STEPS + 2) + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
