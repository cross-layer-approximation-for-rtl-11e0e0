// weighted_sum: one bespoke weighted sum, S = sum_i x_i * w_i + b, i.e. one
// neuron of an MLP or one 1-vs-1 classifier of a linear SVM.
//
// All coefficients w_i and the intercept b are parameters, so every product is
// a bespoke_mult and the whole sum is a constant-coefficient adder tree that
// synthesis can fold. When APPROX is set, the coefficients are first replaced,
// at elaboration, by the hardware-driven approximation of pml_pkg::approx_coeffs
// with window E (4 in the published flow): each w_i moves by at most E to a
// value that is cheaper to build, and the moves are chosen so that their errors
// cancel as far as possible. The intercept is not approximated.
//
// Interface: x holds N unsigned IN_W-bit inputs; s is the S_W-bit signed sum.
// COEF packs the N signed 8-bit coefficients, coefficient i in bits
// [i*8 +: 8]. Purely combinational.
//
// From the published design: the hard-wired coefficients, 8-bit coefficients,
// the approximation steps and e = 4. Own choices: the sum keeps full precision
// (S_W defaults to the exact worst-case width plus room for the intercept), the
// intercept is an integer in the same scale as the products, and the defaults
// of COEF and BIAS are zero (a trained model supplies them).
module weighted_sum
  import pml_pkg::*;
#(
  parameter int                 N      = 4,
  parameter int                 IN_W    = pml_pkg::X_W,
  parameter logic [N*W_W-1:0]   COEF   = '0,
  parameter int                 BIAS   = 0,
  parameter bit                 APPROX = 1'b0,
  parameter int                 E      = 4,
  parameter int                 S_W    = IN_W + W_W + $clog2(N + 1) + 2
) (
  input  logic [IN_W-1:0]        x [N],
  output logic signed [S_W-1:0] s
);

  // Coefficients that are actually built.
  localparam coef_vec_t COEF_EXT = coef_vec_t'(COEF);
  localparam coef_vec_t COEF_EFF = APPROX ? approx_coeffs(COEF_EXT, N, E) : COEF_EXT;

  localparam int P_W = IN_W + W_W;

  initial begin
    assert (N <= MAX_N && E <= MAX_E)
      else $fatal(1, "weighted_sum: N=%0d or E=%0d beyond the approximation limits", N, E);
  end

  logic signed [P_W-1:0] p [N];

  for (genvar i = 0; i < N; i++) begin : g_bm
    bespoke_mult #(
      .X_W(IN_W),
      .W_W(W_W),
      .W  (COEF_EFF[i*W_W +: W_W])
    ) u_bm (
      .x(x[i]),
      .p(p[i])
    );
  end

  always_comb begin
    s = S_W'(signed'(BIAS));
    for (int i = 0; i < N; i++) s = s + S_W'(p[i]);
  end

endmodule
