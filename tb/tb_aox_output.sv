// tb_aox_output -- self-checking test of the AOX output scrambler.
//
// A 64-bit instance is driven with random state words, with sparse words (few
// bits set, where the AND terms matter most) and with words whose set bits
// straddle the wrap-around at bit 63/0. An 8-bit instance is checked
// exhaustively over all 2^16 input pairs. The expected value is computed bit by
// bit from the defining equation
//   r[i] = s0[i] ^ s1[i] ^ ((s0[i-1] & s1[i-1]) | (s0[i-2] & s1[i-2]))  (mod W)
// rather than from the rotate form used in the RTL. One check per vector.
module tb_aox_output;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic [63:0] a64, b64, r64;
  logic [7:0]  a8, b8, r8;

  aox_output #(.W(64)) dut64 (.s0_i(a64), .s1_i(b64), .r_o(r64));
  aox_output #(.W(8))  dut8  (.s0_i(a8),  .s1_i(b8),  .r_o(r8));

  function automatic logic [63:0] ref64(input logic [63:0] s0, input logic [63:0] s1);
    logic [63:0] r;
    for (int i = 0; i < 64; i++) begin
      int i1 = (i + 63) % 64;
      int i2 = (i + 62) % 64;
      r[i] = s0[i] ^ s1[i] ^ ((s0[i1] & s1[i1]) | (s0[i2] & s1[i2]));
    end
    return r;
  endfunction

  function automatic logic [7:0] ref8(input logic [7:0] s0, input logic [7:0] s1);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) begin
      int i1 = (i + 7) % 8;
      int i2 = (i + 6) % 8;
      r[i] = s0[i] ^ s1[i] ^ ((s0[i1] & s1[i1]) | (s0[i2] & s1[i2]));
    end
    return r;
  endfunction

  task automatic check64(input logic [63:0] s0, input logic [63:0] s1);
    a64 = s0;
    b64 = s1;
    @(posedge clk);
    checks++;
    if (r64 !== ref64(s0, s1)) begin
      failures++;
      if (failures < 10)
        $display("FAIL W=64 s0=%h s1=%h got %h expected %h", s0, s1, r64, ref64(s0, s1));
    end
  endtask

  initial begin
    a64 = '0; b64 = '0; a8 = '0; b8 = '0;
    // Directed: single common bit at each position, including the wrap.
    for (int i = 0; i < 64; i++) check64(64'd1 << i, 64'd1 << i);
    check64(64'h8000_0000_0000_0000, 64'h8000_0000_0000_0001);
    check64(64'hC000_0000_0000_0000, 64'hC000_0000_0000_0000);
    check64('1, '1);
    check64('0, '1);
    // Random dense and sparse words.
    for (int n = 0; n < 2000; n++) begin
      logic [63:0] x, y;
      x = {$urandom, $urandom};
      y = {$urandom, $urandom};
      if (n % 2 == 1) begin
        x &= {$urandom, $urandom} & {$urandom, $urandom};
        y &= {$urandom, $urandom} & {$urandom, $urandom};
      end
      check64(x, y);
    end
    // Exhaustive 8-bit instance.
    for (int s0 = 0; s0 < 256; s0++) begin
      for (int s1 = 0; s1 < 256; s1++) begin
        a8 = 8'(s0);
        b8 = 8'(s1);
        @(posedge clk);
        checks++;
        if (r8 !== ref8(a8, b8)) begin
          failures++;
          if (failures < 10) $display("FAIL W=8 s0=%h s1=%h got %h", a8, b8, r8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
