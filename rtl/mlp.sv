// mlp: fully-parallel bespoke multilayer perceptron with one hidden layer.
//
// Every hidden neuron is a weighted_sum over the N_IN inputs, followed by ReLU.
// The ReLU output is brought back to an H_W-bit unsigned activation (dropping
// H_SHIFT fraction bits and saturating at 2^H_W - 1) and feeds the N_OUT output
// neurons, again weighted_sums, whose raw values are the outputs. With one
// output neuron this is the MLP regressor (MLP-R); mlp_c adds the argmax of the
// classifier. All coefficients are hard-wired; APPROX applies the
// hardware-driven coefficient approximation to every neuron separately.
// Purely combinational.
//
// Interface: x holds N_IN unsigned 4-bit inputs; y holds N_OUT signed Y_W-bit
// output-neuron values. COEF1 packs the hidden weights, neuron h input i in
// bits [(h*N_IN+i)*8 +: 8]; COEF2 packs the output weights, neuron o hidden
// input h in bits [(o*N_HID+h)*8 +: 8]. BIAS1/BIAS2 are the intercepts.
//
// From the published design: one hidden layer of at most five ReLU neurons,
// 4-bit inputs, 8-bit coefficients, per-neuron approximation with e = 4, and
// 8-bit-input bespoke multipliers (the second multiplier size it studies).
// Own choices: the hidden requantisation (H_W = 8, H_SHIFT = 4, saturation),
// the full-precision output neurons and all coefficient defaults (zero).
module mlp
  import pml_pkg::*;
#(
  parameter int                       N_IN   = 21,
  parameter int                       N_HID  = 3,
  parameter int                       N_OUT  = 1,
  parameter int                       H_W    = 8,
  parameter int                       H_SHIFT = 4,
  parameter logic [N_HID*N_IN*W_W-1:0]  COEF1 = '0,
  parameter int                       BIAS1 [N_HID] = '{default: 0},
  parameter logic [N_OUT*N_HID*W_W-1:0] COEF2 = '0,
  parameter int                       BIAS2 [N_OUT] = '{default: 0},
  parameter bit                       APPROX = 1'b0,
  parameter int                       E      = 4,
  localparam int                      S1_W   = X_W + W_W + $clog2(N_IN + 1) + 2,
  localparam int                      Y_W    = H_W + W_W + $clog2(N_HID + 1) + 2
) (
  input  logic [X_W-1:0]        x [N_IN],
  output logic signed [Y_W-1:0] y [N_OUT]
);

  logic signed [S1_W-1:0] s1 [N_HID];
  logic [H_W-1:0]         h  [N_HID];

  for (genvar j = 0; j < N_HID; j++) begin : g_hid
    weighted_sum #(
      .N     (N_IN),
      .IN_W  (X_W),
      .COEF  (COEF1[j*N_IN*W_W +: N_IN*W_W]),
      .BIAS  (BIAS1[j]),
      .APPROX(APPROX),
      .E     (E),
      .S_W   (S1_W)
    ) u_ws (
      .x(x),
      .s(s1[j])
    );

    // ReLU, then requantise to H_W bits with saturation.
    always_comb begin
      logic [S1_W-1:0] r;
      r = (s1[j] < 0) ? '0 : (S1_W)'(s1[j] >>> H_SHIFT);
      h[j] = (r > S1_W'((1 << H_W) - 1)) ? '1 : H_W'(r);
    end
  end

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    weighted_sum #(
      .N     (N_HID),
      .IN_W  (H_W),
      .COEF  (COEF2[o*N_HID*W_W +: N_HID*W_W]),
      .BIAS  (BIAS2[o]),
      .APPROX(APPROX),
      .E     (E),
      .S_W   (Y_W)
    ) u_ws (
      .x(h),
      .s(y[o])
    );
  end

endmodule
