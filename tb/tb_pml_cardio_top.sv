// tb_pml_cardio_top: end-to-end test of the four Cardio circuits at their
// default parameters (approximated coefficients, e = 4).
//
// The reference model rebuilds the placeholder model from the same seeds and
// obtains the built coefficients from pml_pkg::approx_coeffs (that function is
// checked against a brute-force search in tb_weighted_sum). From them it
// computes, independently of the RTL datapath, the hidden ReLU neurons with
// requantisation, both MLPs' outputs, the MLP-C argmax, the three SVM-C
// decisions with their votes, and the SVM-R sum.
//
// Each cycle a random sample is offered with in_valid high three times in
// four; every accepted sample must come out two cycles later with out_valid,
// and while out_valid is low the outputs must hold. Mechanisms counted, each
// required at least once: a coefficient moved by the approximation, a hidden
// ReLU clamp, a hidden saturation, every MLP-C and SVM-C class, back-to-back
// samples, idle cycles, and a reset in mid-stream.
module tb_pml_cardio_top;
  import pml_pkg::*;

  localparam int NI  = 21;
  localparam int NH  = 3;
  localparam int NC  = 3;
  localparam int NS  = 3;
  localparam int NSAMPLES = 4000;

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               rst_n;
  logic               in_valid;
  logic [3:0]         x [NI];
  logic               out_valid;
  logic [1:0]         mlpc_class;
  logic signed [19:0] mlpr_value;
  logic [1:0]         svmc_class;
  logic signed [18:0] svmr_value;

  pml_cardio_top u_dut (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .x         (x),
    .out_valid (out_valid),
    .mlpc_class(mlpc_class),
    .mlpr_value(mlpr_value),
    .svmc_class(svmc_class),
    .svmr_value(svmr_value)
  );

  initial begin : watchdog
    repeat (NSAMPLES * 2 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------------------
  // Reference model
  // ---------------------------------------------------------------------------
  int w_mlpc1 [NH][NI];
  int b_mlpc1 [NH];
  int w_mlpc2 [NC][NH];
  int b_mlpc2 [NC];
  int w_mlpr1 [NH][NI];
  int b_mlpr1 [NH];
  int w_mlpr2 [NH];
  int b_mlpr2;
  int w_svmc  [NS][NI];
  int b_svmc  [NS];
  int w_svmr  [NI];
  int b_svmr;
  int moved   = 0;

  // Built coefficient k of a weighted sum of n coefficients taken from
  // placeholder seed `seed`, starting at index `base`.
  function automatic void build(input int seed, input int base, input int n, output int w [NI]);
    coef_vec_t v;
    coef_vec_t a;
    v = '0;
    for (int i = 0; i < n; i++) v[i*W_W +: W_W] = placeholder_coef(seed, base + i);
    a = approx_coeffs(v, n, 4);
    for (int i = 0; i < n; i++) begin
      w[i] = int'(signed'(a[i*W_W +: W_W]));
      if (w[i] != int'(placeholder_coef(seed, base + i))) moved++;
    end
  endfunction

  function automatic int bias(input int seed, input int i);
    return 16 * int'(placeholder_coef(seed, i));
  endfunction

  int clamps = 0;
  int sats   = 0;

  function automatic int hidden(input int s);
    if (s < 0) begin
      clamps++;
      return 0;
    end
    if ((s >>> 4) > 255) begin
      sats++;
      return 255;
    end
    return s >>> 4;
  endfunction

  typedef struct {
    int mlpc;
    int mlpr;
    int svmc;
    int svmr;
  } result_t;

  function automatic result_t model(input logic [3:0] xs [NI]);
    result_t r;
    int      h [NH];
    int      s;
    int      o [NC];
    int      d [NS];
    int      votes [NC];
    int      p;
    // MLP-C
    for (int j = 0; j < NH; j++) begin
      s = b_mlpc1[j];
      for (int i = 0; i < NI; i++) s += int'(xs[i]) * w_mlpc1[j][i];
      h[j] = hidden(s);
    end
    r.mlpc = 0;
    for (int k = 0; k < NC; k++) begin
      o[k] = b_mlpc2[k];
      for (int j = 0; j < NH; j++) o[k] += h[j] * w_mlpc2[k][j];
      if (o[k] > o[r.mlpc]) r.mlpc = k;
    end
    // MLP-R
    r.mlpr = b_mlpr2;
    for (int j = 0; j < NH; j++) begin
      s = b_mlpr1[j];
      for (int i = 0; i < NI; i++) s += int'(xs[i]) * w_mlpr1[j][i];
      r.mlpr += hidden(s) * w_mlpr2[j];
    end
    // SVM-C, pairs (0,1) (0,2) (1,2)
    for (int q = 0; q < NS; q++) begin
      d[q] = b_svmc[q];
      for (int i = 0; i < NI; i++) d[q] += int'(xs[i]) * w_svmc[q][i];
    end
    for (int k = 0; k < NC; k++) votes[k] = 0;
    p = 0;
    for (int i = 0; i < NC; i++)
      for (int j = i + 1; j < NC; j++) begin
        if (d[p] > 0) votes[i]++;
        else          votes[j]++;
        p++;
      end
    r.svmc = 0;
    for (int k = 1; k < NC; k++) if (votes[k] > votes[r.svmc]) r.svmc = k;
    // SVM-R
    r.svmr = b_svmr;
    for (int i = 0; i < NI; i++) r.svmr += int'(xs[i]) * w_svmr[i];
    return r;
  endfunction

  // ---------------------------------------------------------------------------
  // Stimulus and checking
  // ---------------------------------------------------------------------------
  int seen_mlpc [NC];
  int seen_svmc [NC];
  int b2b     = 0;
  int idles   = 0;
  int resets  = 0;

  task automatic check(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    int      tmp [NI];
    result_t exp_q [$];
    bit      v_hist [3];     // in_valid of the last cycles, [1] = one edge ago
    result_t r_hist [3];
    result_t last;
    result_t r;
    bit      prev_v;

    for (int j = 0; j < NH; j++) begin
      build(1, j * NI, NI, tmp);  w_mlpc1[j] = tmp;  b_mlpc1[j] = bias(3, j);
      build(5, j * NI, NI, tmp);  w_mlpr1[j] = tmp;  b_mlpr1[j] = bias(7, j);
    end
    for (int k = 0; k < NC; k++) begin
      build(14, k * NH, NH, tmp);
      for (int j = 0; j < NH; j++) w_mlpc2[k][j] = tmp[j];
      b_mlpc2[k] = bias(4, k);
    end
    build(6, 0, NH, tmp);
    for (int j = 0; j < NH; j++) w_mlpr2[j] = tmp[j];
    b_mlpr2 = bias(8, 0);
    for (int q = 0; q < NS; q++) begin
      build(9, q * NI, NI, tmp);  w_svmc[q] = tmp;  b_svmc[q] = bias(10, q);
    end
    build(11, 0, NI, tmp);
    w_svmr = tmp;
    b_svmr = bias(12, 0);
    $display("coefficients moved by the approximation: %0d", moved);

    for (int k = 0; k < NC; k++) begin
      seen_mlpc[k] = 0;
      seen_svmc[k] = 0;
    end
    rst_n    = 1'b0;
    in_valid = 1'b0;
    for (int i = 0; i < NI; i++) x[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    last   = '{0, 0, 0, 0};
    v_hist = '{0, 0, 0};
    prev_v = 1'b0;

    for (int n = 0; n < NSAMPLES; n++) begin
      // Outputs after the last rising edge: the sample offered two edges ago.
      @(negedge clk);
      check("out_valid", int'(out_valid), int'(v_hist[2]));
      if (v_hist[2]) last = r_hist[2];
      check("mlpc_class", int'(mlpc_class), last.mlpc);
      check("mlpr_value", int'(mlpr_value), last.mlpr);
      check("svmc_class", int'(svmc_class), last.svmc);
      check("svmr_value", int'(svmr_value), last.svmr);

      if (n == NSAMPLES / 2) begin
        // Asynchronous reset in mid-stream clears everything.
        rst_n = 1'b0;
        #1;
        check("out_valid in reset", int'(out_valid), 0);
        check("mlpr_value in reset", int'(mlpr_value), 0);
        resets++;
        @(negedge clk);
        rst_n  = 1'b1;
        last   = '{0, 0, 0, 0};
        v_hist = '{0, 0, 0};
        prev_v = 1'b0;
      end

      // Next sample. Inputs are sparse at times so that small sums occur too.
      in_valid = ($urandom_range(0, 3) != 0);
      if ($urandom_range(0, 1) == 0) begin
        for (int i = 0; i < NI; i++) x[i] = 4'($urandom);
      end else begin
        for (int i = 0; i < NI; i++) x[i] = ($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'd0;
      end
      r = model(x);
      if (in_valid) begin
        seen_mlpc[r.mlpc]++;
        seen_svmc[r.svmc]++;
        if (prev_v) b2b++;
      end else idles++;
      prev_v    = in_valid;
      v_hist[2] = v_hist[1];
      r_hist[2] = r_hist[1];
      v_hist[1] = in_valid;
      r_hist[1] = r;
    end

    $display("MLP-C classes %p, SVM-C classes %p", seen_mlpc, seen_svmc);
    $display("ReLU clamps %0d, saturations %0d, back-to-back %0d, idle %0d, resets %0d",
             clamps, sats, b2b, idles, resets);
    if (moved == 0)  begin failures++; $display("FAIL no coefficient was approximated"); end
    if (clamps == 0) begin failures++; $display("FAIL no ReLU clamp"); end
    if (sats == 0)   begin failures++; $display("FAIL no hidden saturation"); end
    if (b2b == 0)    begin failures++; $display("FAIL no back-to-back samples"); end
    if (idles == 0)  begin failures++; $display("FAIL no idle cycle"); end
    if (resets == 0) begin failures++; $display("FAIL no reset"); end
    for (int k = 0; k < NC; k++) begin
      if (seen_mlpc[k] == 0) begin failures++; $display("FAIL MLP-C class %0d never seen", k); end
      if (seen_svmc[k] == 0) begin failures++; $display("FAIL SVM-C class %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
