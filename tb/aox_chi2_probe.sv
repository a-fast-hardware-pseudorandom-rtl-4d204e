// aox_chi2_probe -- exhaustive output histogram of a W-bit AOX scrambler.
//
// Testbench helper. After `start`, it applies every one of the 2^(2W) pairs
// (s0, s1) to its own aox_output instance, one pair per clock cycle, counts how
// often each of the 2^W output values appears, and then reports the chi-square
// numerator  sum_v (count[v] - E)^2  with E = 2^W (the count every value would
// have if the map were exactly uniform), together with the smallest and
// largest count. chi2 = sum_sq / E. `done` rises when the sweep is finished.
module aox_chi2_probe #(
  parameter int unsigned W = 8
) (
  input  logic    clk,
  input  logic    start,
  output logic    done,
  output longint  sum_sq,
  output longint  min_count,
  output longint  max_count,
  output longint  total
);

  logic [W-1:0] s0, s1, r;
  longint hist [1 << W];

  aox_output #(.W(W)) dut (.s0_i(s0), .s1_i(s1), .r_o(r));

  initial begin
    longint e, d;
    done      = 1'b0;
    sum_sq    = 0;
    min_count = 0;
    max_count = 0;
    total     = 0;
    s0        = '0;
    s1        = '0;
    foreach (hist[i]) hist[i] = 0;
    wait (start);
    for (longint p = 0; p < (longint'(1) << (2 * W)); p++) begin
      s0 = p[W-1:0];
      s1 = p[2*W-1:W];
      @(posedge clk);
      hist[r]++;
    end
    e         = longint'(1) << W;
    min_count = hist[0];
    max_count = hist[0];
    foreach (hist[i]) begin
      d = hist[i] - e;
      sum_sq += d * d;
      total  += hist[i];
      if (hist[i] < min_count) min_count = hist[i];
      if (hist[i] > max_count) max_count = hist[i];
    end
    done = 1'b1;
  end

endmodule
