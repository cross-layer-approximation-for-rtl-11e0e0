// tb_weighted_sum: checks the bespoke weighted sum, exact and approximated.
//
// Two instances share eight coefficients chosen to include the clipping
// borders (127, -128), a power of two and irregular values:
//   * u_exact (APPROX = 0): one-hot probes must return each w_i + b, random
//     inputs the exact sum.
//   * u_apx (APPROX = 1, E = 4): one-hot probes recover the coefficients that
//     were built. Each must lie within E of w_i and be one of its two
//     candidates (cheapest in [w, w+E] and in [w-E, w]). Over the whole vector
//     the pair (|sum of errors|, total cost) must equal the optimum that a
//     brute-force search over all 2^8 candidate choices finds here. The cost
//     of a coefficient is the non-adjacent-form weight minus one, plus one for
//     a negative value. The TB computes that weight with the carry trick
//     (x ^ (x + x/2)), independently of the design's digit loop. Random
//     inputs must then give the sum with the built coefficients.
module tb_weighted_sum;
  localparam int N    = 8;
  localparam int E    = 4;
  localparam int BIAS = -300;
  localparam int WV [N] = '{37, -77, 127, -128, 64, 5, -3, 100};

  function automatic logic [N*8-1:0] pack_w();
    logic [N*8-1:0] v;
    for (int i = 0; i < N; i++) v[i*8 +: 8] = 8'(WV[i]);
    return v;
  endfunction
  localparam logic [N*8-1:0] CW = pack_w();

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]         x [N];
  logic signed [15:0] s_exact;
  logic signed [15:0] s_apx;

  weighted_sum #(.N(N), .IN_W(4), .COEF(CW), .BIAS(BIAS), .APPROX(1'b0), .E(E), .S_W(16))
    u_exact (.x(x), .s(s_exact));
  weighted_sum #(.N(N), .IN_W(4), .COEF(CW), .BIAS(BIAS), .APPROX(1'b1), .E(E), .S_W(16))
    u_apx (.x(x), .s(s_apx));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tb_cost(input int w);
    int a;
    int xh;
    int c;
    int n;
    if (w == 0) return 0;
    a  = (w < 0) ? -w : w;
    xh = a >> 1;
    c  = xh ^ (a + xh);
    n  = $countones(c);
    return n - 1 + ((w < 0) ? 1 : 0);
  endfunction

  function automatic int tb_cheapest(input int w, input int lo, input int hi);
    int best;
    best = w;
    for (int v = (lo < -128 ? -128 : lo); v <= (hi > 127 ? 127 : hi); v++) begin
      if (tb_cost(v) < tb_cost(best) ||
          (tb_cost(v) == tb_cost(best) && (v > w ? v - w : w - v) < (best > w ? best - w : w - best)))
        best = v;
    end
    return best;
  endfunction

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int wa [N];
    int cn [N];
    int cp [N];
    int best_a;
    int best_c;
    int err;
    int cost;
    int got_err;
    int got_cost;
    int changed;
    int sum_e;
    int sum_a;

    for (int i = 0; i < N; i++) x[i] = '0;
    #1;
    check("exact bias", int'(s_exact), BIAS);
    check("approx bias", int'(s_apx), BIAS);

    // One-hot probes recover the coefficients.
    for (int i = 0; i < N; i++) begin
      for (int k = 0; k < N; k++) x[k] = '0;
      x[i] = 4'd1;
      #1;
      check($sformatf("exact w[%0d]", i), int'(s_exact) - BIAS, WV[i]);
      wa[i] = int'(s_apx) - BIAS;
      @(posedge clk);
    end

    // Brute-force optimum over the two candidates of each coefficient.
    for (int i = 0; i < N; i++) begin
      cn[i] = tb_cheapest(WV[i], WV[i], WV[i] + E);
      cp[i] = tb_cheapest(WV[i], WV[i] - E, WV[i]);
    end
    best_a = 1 << 30;
    best_c = 1 << 30;
    for (int m = 0; m < (1 << N); m++) begin
      err  = 0;
      cost = 0;
      for (int i = 0; i < N; i++) begin
        err  += WV[i] - (m[i] ? cp[i] : cn[i]);
        cost += tb_cost(m[i] ? cp[i] : cn[i]);
      end
      if (err < 0) err = -err;
      if (err < best_a || (err == best_a && cost < best_c)) begin
        best_a = err;
        best_c = cost;
      end
    end
    got_err  = 0;
    got_cost = 0;
    changed  = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (!(wa[i] == cn[i] || wa[i] == cp[i]) || wa[i] - WV[i] > E || WV[i] - wa[i] > E) begin
        failures++;
        $display("FAIL w[%0d]=%0d built as %0d, candidates %0d / %0d", i, WV[i], wa[i], cn[i], cp[i]);
      end
      if (wa[i] != WV[i]) changed++;
      got_err  += WV[i] - wa[i];
      got_cost += tb_cost(wa[i]);
      $display("w[%0d] = %4d -> %4d  (cost %0d -> %0d)", i, WV[i], wa[i], tb_cost(WV[i]), tb_cost(wa[i]));
    end
    if (got_err < 0) got_err = -got_err;
    check("approx |sum error|", got_err, best_a);
    check("approx total cost", got_cost, best_c);
    checks++;
    if (changed == 0) begin
      failures++;
      $display("FAIL approximation changed no coefficient");
    end

    // Random inputs: the sums with the exact and the built coefficients.
    for (int n = 0; n < 2000; n++) begin
      sum_e = BIAS;
      sum_a = BIAS;
      for (int i = 0; i < N; i++) begin
        x[i] = 4'($urandom);
        sum_e += int'(x[i]) * WV[i];
        sum_a += int'(x[i]) * wa[i];
      end
      #1;
      check("exact sum", int'(s_exact), sum_e);
      check("approx sum", int'(s_apx), sum_a);
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
