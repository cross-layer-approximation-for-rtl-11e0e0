// pml_cardio_top: the four bespoke printed classifiers/regressors of the
// Cardiotocography model set, side by side on one 21-feature input sample.
//
//   MLP-C  21-3-3, ReLU hidden layer, argmax      -> mlpc_class (3 classes)
//   MLP-R  21-3-1, ReLU hidden layer              -> mlpr_value
//   SVM-C  3 classes, 3 linear 1-vs-1 classifiers -> svmc_class
//   SVM-R  one linear weighted sum                -> svmr_value
//
// Each circuit is fully parallel with every coefficient hard-wired, and with
// APPROX = 1 (the default, the proposed configuration) every neuron and every
// classifier uses the hardware-driven approximated coefficients (window E = 4).
//
// Timing: a sample presented with in_valid is captured in the input register
// at the next rising edge; the four results are captured in the output
// register one edge later and out_valid rises with them, so the latency is two
// cycles and a new sample may be accepted every cycle. The published circuits
// run at a clock period of 200 ms. Outputs hold their value while no new sample
// arrives. rst_n is an asynchronous, active-low reset that clears valid flags
// and registers.
//
// From the published design: topologies and precisions (Table of Cardio
// models: MLP-C (21,3,3), MLP-R (21,3,1), SVM-C 3 classifiers, SVM-R 1), the
// approximation and e = 4. Own choices: the input/output registers and valid
// handshake, and the coefficients: the trained values are not published, so
// the defaults come from pml_pkg's deterministic placeholder generator with
// intercepts of the scale of one full-scale product. Replace the CF_* and BF_*
// localparams by a trained model's fixed-point coefficients to build a real
// classifier.
module pml_cardio_top
  import pml_pkg::*;
#(
  parameter bit APPROX = 1'b1,
  parameter int E      = 4,
  localparam int N_IN  = 21,
  localparam int N_HID = 3,
  localparam int N_CLS = 3,
  localparam int N_SVC = N_CLS * (N_CLS - 1) / 2,
  localparam int H_W   = 8,
  localparam int Y_W   = H_W + W_W + $clog2(N_HID + 1) + 2,
  localparam int D_W   = X_W + W_W + $clog2(N_IN + 1) + 2,
  localparam int C_W   = $clog2(N_CLS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [X_W-1:0]        x [N_IN],
  output logic                  out_valid,
  output logic [C_W-1:0]        mlpc_class,
  output logic signed [Y_W-1:0] mlpr_value,
  output logic [C_W-1:0]        svmc_class,
  output logic signed [D_W-1:0] svmr_value
);

  // ---------------------------------------------------------------------------
  // Placeholder model (seeded per weight set); see the header comment.
  // ---------------------------------------------------------------------------
  function automatic logic [1023:0] gen_coefs(input int seed, input int n);
    logic [1023:0] v;
    v = '0;
    for (int i = 0; i < n; i++) v[i*W_W +: W_W] = placeholder_coef(seed, i);
    return v;
  endfunction

  function automatic int gen_bias(input int seed, input int i);
    return 16 * int'(placeholder_coef(seed, i));
  endfunction

  localparam logic [N_HID*N_IN*W_W-1:0]  CF_MLPC1 = (N_HID*N_IN*W_W)'(gen_coefs(1, N_HID*N_IN));
  localparam logic [N_CLS*N_HID*W_W-1:0] CF_MLPC2 = (N_CLS*N_HID*W_W)'(gen_coefs(14, N_CLS*N_HID));
  localparam int BF_MLPC1 [N_HID] = '{gen_bias(3, 0), gen_bias(3, 1), gen_bias(3, 2)};
  localparam int BF_MLPC2 [N_CLS] = '{gen_bias(4, 0), gen_bias(4, 1), gen_bias(4, 2)};

  localparam logic [N_HID*N_IN*W_W-1:0]  CF_MLPR1 = (N_HID*N_IN*W_W)'(gen_coefs(5, N_HID*N_IN));
  localparam logic [N_HID*W_W-1:0]       CF_MLPR2 = (N_HID*W_W)'(gen_coefs(6, N_HID));
  localparam int BF_MLPR1 [N_HID] = '{gen_bias(7, 0), gen_bias(7, 1), gen_bias(7, 2)};
  localparam int BF_MLPR2 [1]     = '{gen_bias(8, 0)};

  localparam logic [N_SVC*N_IN*W_W-1:0]  CF_SVMC  = (N_SVC*N_IN*W_W)'(gen_coefs(9, N_SVC*N_IN));
  localparam int BF_SVMC [N_SVC]  = '{gen_bias(10, 0), gen_bias(10, 1), gen_bias(10, 2)};

  localparam logic [N_IN*W_W-1:0]        CF_SVMR  = (N_IN*W_W)'(gen_coefs(11, N_IN));
  localparam int BF_SVMR          = gen_bias(12, 0);

  // ---------------------------------------------------------------------------
  // Input register
  // ---------------------------------------------------------------------------
  logic [X_W-1:0] x_q [N_IN];
  logic           v_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0;
      for (int i = 0; i < N_IN; i++) x_q[i] <= '0;
    end else begin
      v_q <= in_valid;
      if (in_valid) x_q <= x;
    end
  end

  // ---------------------------------------------------------------------------
  // The four bespoke circuits
  // ---------------------------------------------------------------------------
  logic signed [Y_W-1:0] mlpc_y [N_CLS];   // output-neuron values, only the class is registered
  logic [C_W-1:0]        mlpc_cls;
  logic signed [Y_W-1:0] mlpr_y [1];
  logic signed [D_W-1:0] svmc_d [N_SVC];   // pairwise decisions, only the class is registered
  logic [C_W-1:0]        svmc_cls;
  logic signed [D_W-1:0] svmr_s;

  mlp_c #(
    .N_IN  (N_IN),
    .N_HID (N_HID),
    .N_OUT (N_CLS),
    .H_W   (H_W),
    .COEF1 (CF_MLPC1),
    .BIAS1 (BF_MLPC1),
    .COEF2 (CF_MLPC2),
    .BIAS2 (BF_MLPC2),
    .APPROX(APPROX),
    .E     (E)
  ) u_mlpc (
    .x  (x_q),
    .y  (mlpc_y),
    .cls(mlpc_cls)
  );

  mlp #(
    .N_IN  (N_IN),
    .N_HID (N_HID),
    .N_OUT (1),
    .H_W   (H_W),
    .COEF1 (CF_MLPR1),
    .BIAS1 (BF_MLPR1),
    .COEF2 (CF_MLPR2),
    .BIAS2 (BF_MLPR2),
    .APPROX(APPROX),
    .E     (E)
  ) u_mlpr (
    .x(x_q),
    .y(mlpr_y)
  );

  svm_c #(
    .N_IN  (N_IN),
    .C     (N_CLS),
    .COEF  (CF_SVMC),
    .BIAS  (BF_SVMC),
    .APPROX(APPROX),
    .E     (E)
  ) u_svmc (
    .x  (x_q),
    .d  (svmc_d),
    .cls(svmc_cls)
  );

  weighted_sum #(
    .N     (N_IN),
    .IN_W  (X_W),
    .COEF  (CF_SVMR),
    .BIAS  (BF_SVMR),
    .APPROX(APPROX),
    .E     (E),
    .S_W   (D_W)
  ) u_svmr (
    .x(x_q),
    .s(svmr_s)
  );

  // ---------------------------------------------------------------------------
  // Output register
  // ---------------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      mlpc_class <= '0;
      mlpr_value <= '0;
      svmc_class <= '0;
      svmr_value <= '0;
    end else begin
      out_valid <= v_q;
      if (v_q) begin
        mlpc_class <= mlpc_cls;
        mlpr_value <= mlpr_y[0];
        svmc_class <= svmc_cls;
        svmr_value <= svmr_s;
      end
    end
  end

endmodule
