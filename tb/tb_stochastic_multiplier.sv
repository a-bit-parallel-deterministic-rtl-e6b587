// tb_stochastic_multiplier: end-to-end self-check of the multiplier at its
// default size (B = 8, N = 256), with no parameter overridden. The B = 3
// worked examples are in tb_table1_examples.
//
// The default instance is driven with all 65,536 operand pairs. For each pair
// the expected product stream is computed here from first principles: X_u is
// X_b trailing ones, Y_u places Y_b ones pair by pair from the leading end
// (upper bit of each pair set when the MSB is set or the pair is covered by
// the low bits, lower bit only when both), and O_u is their AND. The count of
// ones is also checked against a closed form. The absolute error
// |X_b*Y_b/N^2 - ones(O_u)/N| is accumulated; the mean over all pairs must lie
// within 0.035 .. 0.045 (0.04 is the figure reported for this multiplier at
// B = 8) and the maximum must stay below 1/8.
//
// Mechanisms counted, each must occur: Y MSB clear (OR gates carry y_i), Y MSB
// set (AND gates carry y_i), exact products, products with error, a zero
// operand, full-scale operands. The multiplier is combinational: every result
// is checked 1 time unit after the inputs change, with no clock, which is the
// zero-cycle latency the design claims. A watchdog ends the run if it hangs.
module tb_stochastic_multiplier;

  localparam int B = 8;
  localparam int N = 1 << B;
  localparam int H = N / 2;

  logic [B-1:0] xb, yb;
  logic [N-1:0] ou;

  int checks = 0;
  int failures = 0;

  int n_msb_clear = 0, n_msb_set = 0, n_exact = 0, n_inexact = 0;
  int n_zero = 0, n_full = 0;

  stochastic_multiplier dut (.xb(xb), .yb(yb), .ou(ou));

  function automatic logic [N-1:0] ref_ou(input int x, input int y);
    logic [N-1:0] xu = '0, yu = '0;
    int m = y / H, lo = y % H;
    for (int n = 0; n < N; n++) xu[n] = (n < x);
    yu[N-1] = (m == 1);
    for (int p = 1; p < H; p++) begin
      yu[N-1-2*p] = (m == 1) || (p <= lo);
      yu[N-2-2*p] = (m == 1) && (p <= lo);
    end
    return xu & yu;
  endfunction

  // Closed-form count: the positions n < x (0-based) that Y_u sets.
  // Position n lies in pair p = (N-1-n)/2, as its upper bit when N-1-n is
  // even. Count directly over the x lowest positions.
  function automatic int ref_count(input int x, input int y);
    int m = y / H, lo = y % H, c = 0;
    for (int n = 0; n < x; n++) begin
      int d = N - 1 - n;
      int p = d / 2;
      bit upper = (d % 2 == 0);
      if (p == 0) c += (upper && m == 1) ? 1 : 0;
      else if (upper) c += (m == 1 || p <= lo) ? 1 : 0;
      else c += (m == 1 && p <= lo) ? 1 : 0;
    end
    return c;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    static real sum_err = 0.0, max_err = 0.0;
    real err, mae;
    for (int x = 0; x < N; x++) begin
      for (int y = 0; y < N; y++) begin
        xb = B'(x);
        yb = B'(y);
        #1;
        checks++;
        if (ou !== ref_ou(x, y)) begin
          failures++;
          if (failures < 10) $display("%0d*%0d stream mismatch", x, y);
        end
        if (x % 16 == 0) begin
          checks++;
          if ($countones(ou) != ref_count(x, y)) begin
            failures++;
            if (failures < 10) $display("%0d*%0d count mismatch", x, y);
          end
        end
        err = (real'(x) * real'(y)) / (real'(N) * real'(N)) - real'($countones(ou)) / real'(N);
        if (err < 0.0) err = -err;
        sum_err += err;
        if (err > max_err) max_err = err;
        if (y < H) n_msb_clear++; else n_msb_set++;
        if ($countones(ou) * N == x * y) n_exact++; else n_inexact++;
        if (x == 0 || y == 0) n_zero++;
        if (x == N - 1 && y == N - 1) n_full++;
      end
    end
    mae = sum_err / (real'(N) * real'(N));
    $display("B=%0d: mean absolute error %f, max %f over %0d pairs", B, mae, max_err, N * N);
    checks++;
    if (mae < 0.035 || mae > 0.045) begin
      failures++;
      $display("mean absolute error out of range");
    end
    checks++;
    if (max_err >= 0.125) failures++;

    $display("counts: msb_clear=%0d msb_set=%0d exact=%0d inexact=%0d zero=%0d full=%0d",
             n_msb_clear, n_msb_set, n_exact, n_inexact, n_zero, n_full);
    checks++; if (n_msb_clear == 0) failures++;
    checks++; if (n_msb_set   == 0) failures++;
    checks++; if (n_exact     == 0) failures++;
    checks++; if (n_inexact   == 0) failures++;
    checks++; if (n_zero      == 0) failures++;
    checks++; if (n_full      == 0) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
