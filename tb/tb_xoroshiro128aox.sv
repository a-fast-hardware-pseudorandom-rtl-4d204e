// tb_xoroshiro128aox -- end-to-end test of the generator at its default
// parameters (constants 55/14/36, 64-bit output).
//
// Inputs change on the falling clock edge; rand_o is compared just before each
// rising edge with a software model of the generator kept in this testbench
// (state update and AOX written out from their definitions).
// Phases:
//  1. reset: the first five outputs from the reset seed (s0 = 1, s1 = all ones)
//     are compared with known answers computed by an independent model;
//  2. throughput: with advance held high, 1000 consecutive words come out in
//     1000 cycles, all matching the model;
//  3. random traffic: random seed loads, advances and stalls for 20000 cycles,
//     including cycles with seed load and advance together (seed load wins);
//  4. reset in mid-stream returns to the reset seed.
// Every mechanism (reset, seed load, advance, stall, load-over-advance) is
// counted and a failure is recorded for any that never happened.
module tb_xoroshiro128aox;
  import xoro_pkg::*;

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
  int n_reset = 0, n_seed = 0, n_advance = 0, n_stall = 0, n_load_over_adv = 0;

  // ---- reference model ----
  logic [63:0] m_s0, m_s1;

  function automatic logic [63:0] rl(input logic [63:0] x, input int k);
    return (x << k) | (x >> (64 - k));
  endfunction

  function automatic logic [63:0] m_out(input logic [63:0] s0, input logic [63:0] s1);
    logic [63:0] r;
    for (int i = 0; i < 64; i++)
      r[i] = s0[i] ^ s1[i] ^ ((s0[(i+63)%64] & s1[(i+63)%64]) | (s0[(i+62)%64] & s1[(i+62)%64]));
    return r;
  endfunction

  task automatic m_step();
    logic [63:0] x;
    x    = m_s0 ^ m_s1;
    m_s0 = rl(m_s0, 55) ^ x ^ (x << 14);
    m_s1 = rl(x, 36);
  endtask

  // One clock cycle: drive at the falling edge, check before the rising edge,
  // then update the model as the RTL does at that edge.
  task automatic cycle(input logic ld, input xoro_state_t sd, input logic adv);
    @(negedge clk);
    seed_load = ld;
    seed      = sd;
    advance   = adv;
    #4;
    checks++;
    if (rand_w !== m_out(m_s0, m_s1)) begin
      failures++;
      if (failures < 10) $display("FAIL t=%0t rand=%h expected %h", $time, rand_w, m_out(m_s0, m_s1));
    end
    @(posedge clk);
    if (ld) begin
      m_s0 = sd.s0;
      m_s1 = sd.s1;
      n_seed++;
      if (adv) n_load_over_adv++;
    end else if (adv) begin
      m_step();
      n_advance++;
    end else begin
      n_stall++;
    end
  endtask

  task automatic do_reset();
    @(negedge clk);
    seed_load = 1'b0;
    advance   = 1'b0;
    rst_n     = 1'b0;
    #2;
    rst_n = 1'b1;
    m_s0 = 64'd1;
    m_s1 = '1;
    n_reset++;
  endtask

  function automatic xoro_state_t rnd_seed();
    xoro_state_t s;
    s.s0 = {$urandom, $urandom};
    s.s1 = {$urandom, $urandom};
    if (s == '0) s.s0 = 64'd1;
    return s;
  endfunction

  logic [63:0] kat [5];
  initial begin
    kat[0] = 64'hfffffffffffffff8;
    kat[1] = 64'hfc7fffeffffe7ffd;
    kat[2] = 64'hff7c406f97ffbe3e;
    kat[3] = 64'h8f02643ff763811f;
    kat[4] = 64'h7203cb958f34d19e;
  end

  initial begin
    int t0;
    rst_n     = 1'b1;
    seed_load = 1'b0;
    seed      = '0;
    advance   = 1'b0;
    m_s0 = 64'd1;
    m_s1 = '1;
    #1 rst_n = 1'b0;
    #3 rst_n = 1'b1;
    n_reset++;

    // 1. known answers from the reset seed
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      advance = 1'b1;
      #4;
      checks++;
      if (rand_w !== kat[k]) begin
        failures++;
        $display("FAIL known answer %0d: got %h expected %h", k, rand_w, kat[k]);
      end
      @(posedge clk);
      m_step();
      n_advance++;
    end

    // 2. one word per cycle
    t0 = int'($time / 10);
    for (int k = 0; k < 1000; k++) cycle(1'b0, '0, 1'b1);
    checks++;
    if (int'($time / 10) - t0 != 1000) begin
      failures++;
      $display("FAIL rate: 1000 words took %0d cycles", int'($time / 10) - t0);
    end

    // 3. random traffic
    for (int k = 0; k < 20000; k++) begin
      int unsigned r;
      r = $urandom % 100;
      cycle(r < 3, rnd_seed(), (r < 2) || (r >= 25));
    end

    // 4. reset in mid-stream
    do_reset();
    for (int k = 0; k < 50; k++) cycle(1'b0, '0, 1'b1);

    checks++; if (n_reset < 2)         begin failures++; $display("FAIL reset not exercised"); end
    checks++; if (n_seed == 0)         begin failures++; $display("FAIL seed load not exercised"); end
    checks++; if (n_advance == 0)      begin failures++; $display("FAIL advance not exercised"); end
    checks++; if (n_stall == 0)        begin failures++; $display("FAIL stall not exercised"); end
    checks++; if (n_load_over_adv == 0) begin failures++; $display("FAIL load+advance not exercised"); end
    $display("mechanisms: reset=%0d seed_load=%0d advance=%0d stall=%0d load_over_advance=%0d",
             n_reset, n_seed, n_advance, n_stall, n_load_over_adv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
