// wl_svm_check: test helper that builds one SVM workload (an SVM-C with C
// classes through svm_c when C > 1, an SVM-R through one weighted_sum when
// C = 1) with approximated placeholder coefficients drawn from SEED, drives
// NSAMP random samples and compares the decision values, the sum and the class
// with a reference model computed here. Classifier p input i is placeholder
// index p*N_IN+i of SEED; intercepts are 16 x placeholder(SEED+1, p).
// After `start` it runs one sample per clock and raises `done`.
module wl_svm_check
  import pml_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int C     = 3,
  parameter int SEED  = 200,
  parameter int NSAMP = 500
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int P   = (C > 1) ? C * (C - 1) / 2 : 1;
  localparam int D_W = X_W + W_W + $clog2(N_IN + 1) + 2;
  localparam int C_W = (C > 1) ? $clog2(C) : 1;

  function automatic logic [P*N_IN*W_W-1:0] gen();
    logic [P*N_IN*W_W-1:0] v;
    for (int k = 0; k < P * N_IN; k++) v[k*W_W +: W_W] = placeholder_coef(SEED, k);
    return v;
  endfunction
  typedef int b_t [P];
  function automatic b_t gen_b();
    b_t b;
    for (int p = 0; p < P; p++) b[p] = 16 * int'(placeholder_coef(SEED + 1, p));
    return b;
  endfunction
  localparam logic [P*N_IN*W_W-1:0] CW = gen();
  localparam b_t                    BW = gen_b();

  logic [X_W-1:0]        x [N_IN];
  logic signed [D_W-1:0] d [P];
  logic [C_W-1:0]        cls;

  if (C > 1) begin : g_c
    svm_c #(.N_IN(N_IN), .C(C), .COEF(CW), .BIAS(BW), .APPROX(1'b1), .E(4))
      u_dut (.x(x), .d(d), .cls(cls));
  end else begin : g_r
    weighted_sum #(.N(N_IN), .IN_W(X_W), .COEF(CW), .BIAS(BW[0]), .APPROX(1'b1), .E(4), .S_W(D_W))
      u_dut (.x(x), .s(d[0]));
    assign cls = '0;
  end

  int w [P][N_IN];

  initial begin
    coef_vec_t v;
    coef_vec_t a;
    int dv [P];
    int votes [C];
    int q;
    int bi;
    done     = 1'b0;
    checks   = 0;
    failures = 0;
    for (int i = 0; i < N_IN; i++) x[i] = '0;
    for (int p = 0; p < P; p++) begin
      v = '0;
      for (int i = 0; i < N_IN; i++) v[i*W_W +: W_W] = placeholder_coef(SEED, p * N_IN + i);
      a = approx_coeffs(v, N_IN, 4);
      for (int i = 0; i < N_IN; i++) w[p][i] = int'(signed'(a[i*W_W +: W_W]));
    end
    wait (start);
    for (int n = 0; n < NSAMP; n++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++)
        x[i] = (n % 2 == 0) ? 4'($urandom) : (($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'd0);
      for (int p = 0; p < P; p++) begin
        dv[p] = BW[p];
        for (int i = 0; i < N_IN; i++) dv[p] += int'(x[i]) * w[p][i];
      end
      for (int k = 0; k < C; k++) votes[k] = 0;
      q = 0;
      for (int i = 0; i < C; i++)
        for (int j = i + 1; j < C; j++) begin
          if (dv[q] > 0) votes[i]++;
          else           votes[j]++;
          q++;
        end
      bi = 0;
      for (int k = 1; k < C; k++) if (votes[k] > votes[bi]) bi = k;
      #1;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (int'(d[p]) != dv[p]) begin
          failures++;
          if (failures < 5) $display("FAIL SVM %0d/%0d d[%0d]=%0d expected %0d", N_IN, C, p, d[p], dv[p]);
        end
      end
      if (C > 1) begin
        checks++;
        if (int'(cls) != bi) begin
          failures++;
          if (failures < 5) $display("FAIL SVM-C %0d/%0d class %0d expected %0d", N_IN, C, cls, bi);
        end
      end
    end
    done = 1'b1;
  end
endmodule
