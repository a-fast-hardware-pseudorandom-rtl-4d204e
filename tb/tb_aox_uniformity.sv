// tb_aox_uniformity -- output-uniformity workload for the AOX scrambler.
//
// AOX maps 2W state bits to W output bits, and unlike addition it is not
// provably uniform. Following the usual way of measuring this, the scrambler is
// evaluated at reduced widths W = 8, 10 and 12 over every possible state pair
// (2^16, 2^20 and 2^24 inputs), the output histogram is collected and the
// chi-square statistic against the uniform distribution is formed,
//   chi2 = sum_v (count[v] - 2^W)^2 / 2^W,  with 2^W - 1 degrees of freedom.
// Checks per width:
//  * the histogram accounts for every input;
//  * the numerator sum_v (count[v] - 2^W)^2 equals the value from an
//    independent software enumeration (43330, 626058, 9033394);
//  * chi2 lies below the 95 % critical value of the chi-square distribution,
//    computed here with the Wilson-Hilferty approximation.
module tb_aox_uniformity;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks   = 0;
  int failures = 0;

  logic   start;
  logic   done8, done10, done12;
  longint sq8, sq10, sq12, mn8, mn10, mn12, mx8, mx10, mx12, tot8, tot10, tot12;

  aox_chi2_probe #(.W(8))  p8  (.clk(clk), .start(start), .done(done8),  .sum_sq(sq8),
                                .min_count(mn8),  .max_count(mx8),  .total(tot8));
  aox_chi2_probe #(.W(10)) p10 (.clk(clk), .start(start), .done(done10), .sum_sq(sq10),
                                .min_count(mn10), .max_count(mx10), .total(tot10));
  aox_chi2_probe #(.W(12)) p12 (.clk(clk), .start(start), .done(done12), .sum_sq(sq12),
                                .min_count(mn12), .max_count(mx12), .total(tot12));

  function automatic real crit95(input real df);
    real z, h;
    z = 1.6448536;
    h = 2.0 / (9.0 * df);
    return df * (1.0 - h + z * $sqrt(h)) ** 3;
  endfunction

  task automatic judge(input int w, input longint sq, input longint mn, input longint mx,
                       input longint tot, input longint sq_ref);
    real chi2, df, c;
    df   = real'((longint'(1) << w) - 1);
    chi2 = real'(sq) / real'(longint'(1) << w);
    c    = crit95(df);
    $display("W=%0d: chi2 = %0.3f (df %0.0f, 95%% critical %0.1f), counts %0d..%0d, expected %0d",
             w, chi2, df, c, mn, mx, longint'(1) << w);
    checks++;
    if (tot != (longint'(1) << (2 * w))) begin
      failures++;
      $display("FAIL W=%0d histogram total %0d", w, tot);
    end
    checks++;
    if (sq != sq_ref) begin
      failures++;
      $display("FAIL W=%0d sum of squares %0d, expected %0d", w, sq, sq_ref);
    end
    checks++;
    if (chi2 >= c) begin
      failures++;
      $display("FAIL W=%0d chi2 above critical value", w);
    end
  endtask

  initial begin
    start = 1'b0;
    repeat (2) @(posedge clk);
    start = 1'b1;
    wait (done8 && done10 && done12);
    judge(8,  sq8,  mn8,  mx8,  tot8,  43330);
    judge(10, sq10, mn10, mx10, tot10, 626058);
    judge(12, sq12, mn12, mx12, tot12, 9033394);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat ((1 << 24) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
