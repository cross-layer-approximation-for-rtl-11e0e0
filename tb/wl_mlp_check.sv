// wl_mlp_check: test helper that builds one MLP workload (an MLP-C through
// mlp_c when N_OUT > 1, an MLP-R through mlp when N_OUT = 1) with
// approximated placeholder coefficients drawn from SEED, drives NSAMP random
// samples and compares every output with a reference model computed here.
// Coefficient packing follows mlp: hidden neuron j input i is placeholder
// index j*N_IN+i of SEED, output neuron o hidden input j is index o*N_HID+j of
// SEED+1; intercepts are 16 x placeholder(SEED+2, j) and (SEED+3, o).
// After `start` it runs one sample per clock and raises `done`; `checks` and
// `failures` are its counts.
module wl_mlp_check
  import pml_pkg::*;
#(
  parameter int N_IN  = 4,
  parameter int N_HID = 2,
  parameter int N_OUT = 2,
  parameter int SEED  = 100,
  parameter int NSAMP = 500
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int Y_W = 8 + W_W + $clog2(N_HID + 1) + 2;
  localparam int C_W = (N_OUT > 1) ? $clog2(N_OUT) : 1;

  function automatic logic [N_HID*N_IN*W_W-1:0] gen1();
    logic [N_HID*N_IN*W_W-1:0] v;
    for (int k = 0; k < N_HID * N_IN; k++) v[k*W_W +: W_W] = placeholder_coef(SEED, k);
    return v;
  endfunction
  function automatic logic [N_OUT*N_HID*W_W-1:0] gen2();
    logic [N_OUT*N_HID*W_W-1:0] v;
    for (int k = 0; k < N_OUT * N_HID; k++) v[k*W_W +: W_W] = placeholder_coef(SEED + 1, k);
    return v;
  endfunction
  function automatic int bias(input int s, input int i);
    return 16 * int'(placeholder_coef(s, i));
  endfunction
  typedef int b1_t [N_HID];
  typedef int b2_t [N_OUT];
  function automatic b1_t gen_b1();
    b1_t b;
    for (int j = 0; j < N_HID; j++) b[j] = bias(SEED + 2, j);
    return b;
  endfunction
  function automatic b2_t gen_b2();
    b2_t b;
    for (int o = 0; o < N_OUT; o++) b[o] = bias(SEED + 3, o);
    return b;
  endfunction

  logic [X_W-1:0]        x [N_IN];
  logic signed [Y_W-1:0] y [N_OUT];
  logic [C_W-1:0]        cls;

  if (N_OUT > 1) begin : g_c
    mlp_c #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .COEF1(gen1()), .BIAS1(gen_b1()),
            .COEF2(gen2()), .BIAS2(gen_b2()), .APPROX(1'b1), .E(4))
      u_dut (.x(x), .y(y), .cls(cls));
  end else begin : g_r
    mlp #(.N_IN(N_IN), .N_HID(N_HID), .N_OUT(1), .COEF1(gen1()), .BIAS1(gen_b1()),
          .COEF2(gen2()), .BIAS2(gen_b2()), .APPROX(1'b1), .E(4))
      u_dut (.x(x), .y(y));
    assign cls = '0;
  end

  int w1 [N_HID][N_IN];
  int w2 [N_OUT][N_HID];

  initial begin
    coef_vec_t v;
    coef_vec_t a;
    int h [N_HID];
    int o [N_OUT];
    int s;
    int bi;
    b1_t b1;
    b2_t b2;
    done     = 1'b0;
    checks   = 0;
    failures = 0;
    b1 = gen_b1();
    b2 = gen_b2();
    for (int i = 0; i < N_IN; i++) x[i] = '0;
    for (int j = 0; j < N_HID; j++) begin
      v = '0;
      for (int i = 0; i < N_IN; i++) v[i*W_W +: W_W] = placeholder_coef(SEED, j * N_IN + i);
      a = approx_coeffs(v, N_IN, 4);
      for (int i = 0; i < N_IN; i++) w1[j][i] = int'(signed'(a[i*W_W +: W_W]));
    end
    for (int k = 0; k < N_OUT; k++) begin
      v = '0;
      for (int j = 0; j < N_HID; j++) v[j*W_W +: W_W] = placeholder_coef(SEED + 1, k * N_HID + j);
      a = approx_coeffs(v, N_HID, 4);
      for (int j = 0; j < N_HID; j++) w2[k][j] = int'(signed'(a[j*W_W +: W_W]));
    end
    wait (start);
    for (int n = 0; n < NSAMP; n++) begin
      @(negedge clk);
      for (int i = 0; i < N_IN; i++)
        x[i] = (n % 2 == 0) ? 4'($urandom) : (($urandom_range(0, 3) == 0) ? 4'($urandom) : 4'd0);
      for (int j = 0; j < N_HID; j++) begin
        s = b1[j];
        for (int i = 0; i < N_IN; i++) s += int'(x[i]) * w1[j][i];
        h[j] = (s < 0) ? 0 : (((s >>> 4) > 255) ? 255 : (s >>> 4));
      end
      bi = 0;
      for (int k = 0; k < N_OUT; k++) begin
        o[k] = b2[k];
        for (int j = 0; j < N_HID; j++) o[k] += h[j] * w2[k][j];
        if (o[k] > o[bi]) bi = k;
      end
      #1;
      for (int k = 0; k < N_OUT; k++) begin
        checks++;
        if (int'(y[k]) != o[k]) begin
          failures++;
          if (failures < 5) $display("FAIL MLP %0d-%0d-%0d y[%0d]=%0d expected %0d", N_IN, N_HID, N_OUT, k, y[k], o[k]);
        end
      end
      if (N_OUT > 1) begin
        checks++;
        if (int'(cls) != bi) begin
          failures++;
          if (failures < 5) $display("FAIL MLP-C %0d-%0d-%0d class %0d expected %0d", N_IN, N_HID, N_OUT, cls, bi);
        end
      end
    end
    done = 1'b1;
  end
endmodule
