// tb_xoro_state_update -- self-checking test of the xoroshiro128 transition.
//
// Checks, for the default constants (55, 14, 36) and for the alternative set
// (24, 16, 37):
//  * known answers: five successive states from the seed s0 = 1, s1 = all ones,
//    computed beforehand with an independent software model of the algorithm;
//  * 1000 random states against a reference written with explicit shifts;
//  * F2-linearity: next(a ^ b) == next(a) ^ next(b) for random a, b;
//  * the all-zero state maps to itself.
module tb_xoro_state_update;
  import xoro_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  xoro_state_t st_a, nx_a;   // 55/14/36
  xoro_state_t st_b, nx_b;   // 24/16/37

  xoro_state_update dut_a (.state_i(st_a), .state_o(nx_a));
  xoro_state_update #(.ROT_A(ROT_A_2018), .SHIFT_B(SHIFT_B_2018), .ROT_C(ROT_C_2018))
    dut_b (.state_i(st_b), .state_o(nx_b));

  function automatic logic [63:0] rl(input logic [63:0] x, input int k);
    return (x << k) | (x >> (64 - k));
  endfunction

  function automatic xoro_state_t ref_next(input xoro_state_t s, input int a, input int b, input int c);
    xoro_state_t n;
    logic [63:0] x;
    x    = s.s0 ^ s.s1;
    n.s0 = rl(s.s0, a) ^ x ^ (x << b);
    n.s1 = rl(x, c);
    return n;
  endfunction

  task automatic expect_eq(input string what, input xoro_state_t got, input xoro_state_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  function automatic xoro_state_t rnd_state();
    xoro_state_t s;
    s.s0 = {$urandom, $urandom};
    s.s1 = {$urandom, $urandom};
    return s;
  endfunction

  // Known answers for 55/14/36 from seed s0 = 1, s1 = ~0: {s1, s0} after each step.
  xoro_state_t kat [5];
  initial begin
    kat[0] = '{s1: 64'hffffffefffffffff, s0: 64'h0080000000007ffe};
    kat[1] = '{s1: 64'hfff8001ff7fffeff, s0: 64'hff8440101fffc03e};
    kat[2] = '{s1: 64'h8003ec1007c400fe, s0: 64'h0f00782fefbf8121};
    kat[3] = '{s1: 64'h87b81df8f03943fe, s0: 64'hfa8bee1d1ffb9e1f};
    kat[4] = '{s1: 64'hfc2dde17d33f3e5e, s0: 64'h8e37cde25635602e};
  end

  initial begin
    xoro_state_t a, b, na, nb;
    st_a = '{s1: '1, s0: 64'd1};
    st_b = '0;
    for (int k = 0; k < 5; k++) begin
      @(posedge clk);
      expect_eq($sformatf("known answer step %0d", k + 1), nx_a, kat[k]);
      st_a = nx_a;
    end
    for (int n = 0; n < 1000; n++) begin
      st_a = rnd_state();
      st_b = rnd_state();
      @(posedge clk);
      expect_eq("random 55/14/36", nx_a, ref_next(st_a, 55, 14, 36));
      expect_eq("random 24/16/37", nx_b, ref_next(st_b, 24, 16, 37));
    end
    for (int n = 0; n < 200; n++) begin
      a = rnd_state();
      b = rnd_state();
      st_a = a;
      @(posedge clk);
      na = nx_a;
      st_a = b;
      @(posedge clk);
      nb = nx_a;
      st_a = a ^ b;
      @(posedge clk);
      expect_eq("linearity", nx_a, na ^ nb);
    end
    st_a = '0;
    st_b = '0;
    @(posedge clk);
    expect_eq("zero state 55/14/36", nx_a, '0);
    expect_eq("zero state 24/16/37", nx_b, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
