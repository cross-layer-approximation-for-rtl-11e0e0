// tb_mlp: checks the bespoke MLP regressor datapath (4 inputs, 3 hidden ReLU
// neurons, 1 output neuron) with exact coefficients.
//
// The reference model here computes each hidden sum, applies ReLU, drops
// H_SHIFT = 4 fraction bits, saturates at 255 and feeds the output neuron.
// The coefficients are chosen so that over random inputs hidden neuron 0 is
// sometimes negative (ReLU clamps it), neuron 1 sometimes saturates and
// neuron 2 stays in range; the test fails if the clamp or the saturation is
// never exercised.
module tb_mlp;
  localparam int NI = 4;
  localparam int NH = 3;
  localparam int W1 [NH][NI] = '{'{-50, 30, 20, -40}, '{127, 100, 90, 120}, '{10, 12, -6, 9}};
  localparam int B1 [NH]     = '{40, 100, 5};
  localparam int W2 [NH]     = '{-70, 3, 111};
  localparam int B2 [1]      = '{-1000};

  function automatic logic [NH*NI*8-1:0] pack1();
    logic [NH*NI*8-1:0] v;
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < NI; i++) v[(j*NI+i)*8 +: 8] = 8'(W1[j][i]);
    return v;
  endfunction
  function automatic logic [NH*8-1:0] pack2();
    logic [NH*8-1:0] v;
    for (int j = 0; j < NH; j++) v[j*8 +: 8] = 8'(W2[j]);
    return v;
  endfunction

  int checks   = 0;
  int failures = 0;
  int clamps   = 0;
  int sats     = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]         x [NI];
  logic signed [19:0] y [1];

  mlp #(
    .N_IN(NI), .N_HID(NH), .N_OUT(1), .H_W(8), .H_SHIFT(4),
    .COEF1(pack1()), .BIAS1(B1), .COEF2(pack2()), .BIAS2(B2), .APPROX(1'b0)
  ) u_dut (.x(x), .y(y));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    int h;
    int o;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < NI; i++) x[i] = 4'($urandom);
      o = B2[0];
      for (int j = 0; j < NH; j++) begin
        s = B1[j];
        for (int i = 0; i < NI; i++) s += int'(x[i]) * W1[j][i];
        if (s < 0) begin
          h = 0;
          clamps++;
        end else begin
          h = s >>> 4;
          if (h > 255) begin
            h = 255;
            sats++;
          end
        end
        o += h * W2[j];
      end
      #1;
      checks++;
      if (int'(y[0]) != o) begin
        failures++;
        $display("FAIL x=%p y=%0d expected %0d", x, y[0], o);
      end
      @(posedge clk);
    end
    $display("ReLU clamps %0d, saturations %0d", clamps, sats);
    if (clamps == 0 || sats == 0) begin
      failures++;
      $display("FAIL ReLU clamp or saturation never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
