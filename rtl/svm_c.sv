// svm_c: bespoke linear-kernel SVM classifier with 1-vs-1 voting.
//
// A C-class model has P = C(C-1)/2 pairwise classifiers; each is a
// weighted_sum over the N_IN inputs with its own hard-wired coefficients and
// intercept (a linear kernel folds the support vectors into one weight vector
// per classifier). ovo_vote turns the P decision values into a class. APPROX
// applies the hardware-driven coefficient approximation per classifier.
// Purely combinational.
//
// Interface: x holds N_IN unsigned 4-bit inputs; d the P decision values;
// cls the class. COEF packs classifier p input i in bits [(p*N_IN+i)*8 +: 8],
// classifiers in the pair order of ovo_vote.
// From the published design: linear kernel, 1-vs-1, 8-bit coefficients, 4-bit
// inputs, per-classifier approximation. Own choices: pair order, vote sign,
// zero coefficient defaults.
module svm_c
  import pml_pkg::*;
#(
  parameter int                  N_IN   = 21,
  parameter int                  C      = 3,
  localparam int                 P      = C * (C - 1) / 2,
  parameter logic [P*N_IN*W_W-1:0] COEF = '0,
  parameter int                  BIAS [P] = '{default: 0},
  parameter bit                  APPROX = 1'b0,
  parameter int                  E      = 4,
  localparam int                 D_W    = X_W + W_W + $clog2(N_IN + 1) + 2,
  localparam int                 C_W    = (C > 1) ? $clog2(C) : 1
) (
  input  logic [X_W-1:0]        x [N_IN],
  output logic signed [D_W-1:0] d [P],
  output logic [C_W-1:0]        cls
);

  for (genvar p = 0; p < P; p++) begin : g_clf
    weighted_sum #(
      .N     (N_IN),
      .IN_W  (X_W),
      .COEF  (COEF[p*N_IN*W_W +: N_IN*W_W]),
      .BIAS  (BIAS[p]),
      .APPROX(APPROX),
      .E     (E),
      .S_W   (D_W)
    ) u_ws (
      .x(x),
      .s(d[p])
    );
  end

  ovo_vote #(
    .C  (C),
    .D_W(D_W)
  ) u_vote (
    .d  (d),
    .cls(cls)
  );

endmodule
