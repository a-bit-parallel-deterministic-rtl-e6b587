// tb_error_vs_difference: absolute error of the default B = 8 multiplier as a
// function of the normalised operand difference |X_b - Y_b| / N.
//
// Every one of the 65,536 operand pairs is run through the top level with no
// parameter overridden. Each absolute error |X_b*Y_b/N^2 - ones(O_u)/N| is
// put into one of ten bins of |X_b - Y_b| / N (bin 9 also holds 1.0), and the
// count, mean and maximum error of each bin are printed. The multiplier is
// meant to give an error that depends little on the operand difference, so
// the checks are: every bin's maximum error is below 1/8, every bin's mean is
// below 0.05, and the bin means over differences below 0.6 (where most pairs
// lie) stay within 0.01 of each other. The product streams themselves are
// checked in tb_stochastic_multiplier. A watchdog ends the run if it hangs.
module tb_error_vs_difference;

  localparam int B = 8;
  localparam int N = 1 << B;
  localparam int BINS = 10;

  logic [B-1:0] xb, yb;
  logic [N-1:0] ou;

  int checks = 0;
  int failures = 0;

  int  bin_n   [BINS];
  real bin_sum [BINS];
  real bin_max [BINS];

  stochastic_multiplier dut (.xb(xb), .yb(yb), .ou(ou));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real err, mean, lo_mean, hi_mean;
    int  d, k;
    for (int i = 0; i < BINS; i++) begin
      bin_n[i] = 0; bin_sum[i] = 0.0; bin_max[i] = 0.0;
    end
    for (int x = 0; x < N; x++) begin
      for (int y = 0; y < N; y++) begin
        xb = B'(x);
        yb = B'(y);
        #1;
        err = (real'(x) * real'(y)) / (real'(N) * real'(N)) - real'($countones(ou)) / real'(N);
        if (err < 0.0) err = -err;
        d = (x > y) ? x - y : y - x;
        k = (d * BINS) / N;
        if (k > BINS - 1) k = BINS - 1;
        bin_n[k]++;
        bin_sum[k] += err;
        if (err > bin_max[k]) bin_max[k] = err;
      end
    end
    lo_mean = 1.0;
    hi_mean = 0.0;
    $display("|X-Y|/N bin   pairs   mean abs error   max abs error");
    for (int i = 0; i < BINS; i++) begin
      mean = bin_sum[i] / real'(bin_n[i]);
      $display("  %0d.%0d-%0d.%0d   %6d   %f         %f", i / 10, i % 10,
               (i + 1) / 10, (i + 1) % 10, bin_n[i], mean, bin_max[i]);
      checks++;
      if (bin_n[i] == 0 || mean >= 0.05) failures++;
      checks++;
      if (bin_max[i] >= 0.125) failures++;
      if (i < 6) begin
        if (mean < lo_mean) lo_mean = mean;
        if (mean > hi_mean) hi_mean = mean;
      end
    end
    checks++;
    if (hi_mean - lo_mean > 0.01) begin
      failures++;
      $display("bin means below 0.6 spread by %f", hi_mean - lo_mean);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
