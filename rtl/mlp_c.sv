// mlp_c: bespoke MLP classifier, an mlp with N_OUT output neurons followed by
// argmax, which turns the output-neuron values into a class index.
//
// Parameters and coefficient packing are those of mlp. Purely combinational:
// cls follows x through the two neuron layers and the argmax.
// From the published design: MLP-C = one ReLU hidden layer plus argmax.
module mlp_c
  import pml_pkg::*;
#(
  parameter int                        N_IN   = 21,
  parameter int                        N_HID  = 3,
  parameter int                        N_OUT  = 3,
  parameter int                        H_W    = 8,
  parameter int                        H_SHIFT = 4,
  parameter logic [N_HID*N_IN*W_W-1:0]  COEF1 = '0,
  parameter int                        BIAS1 [N_HID] = '{default: 0},
  parameter logic [N_OUT*N_HID*W_W-1:0] COEF2 = '0,
  parameter int                        BIAS2 [N_OUT] = '{default: 0},
  parameter bit                        APPROX = 1'b0,
  parameter int                        E      = 4,
  localparam int                       Y_W    = H_W + W_W + $clog2(N_HID + 1) + 2,
  localparam int                       C_W    = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic [X_W-1:0]        x [N_IN],
  output logic signed [Y_W-1:0] y [N_OUT],
  output logic [C_W-1:0]        cls
);

  mlp #(
    .N_IN   (N_IN),
    .N_HID  (N_HID),
    .N_OUT  (N_OUT),
    .H_W    (H_W),
    .H_SHIFT(H_SHIFT),
    .COEF1  (COEF1),
    .BIAS1  (BIAS1),
    .COEF2  (COEF2),
    .BIAS2  (BIAS2),
    .APPROX (APPROX),
    .E      (E)
  ) u_mlp (
    .x(x),
    .y(y)
  );

  argmax #(
    .K  (N_OUT),
    .V_W(Y_W)
  ) u_argmax (
    .val(y),
    .idx(cls)
  );

endmodule
