// tb_mlp_c: checks the bespoke MLP classifier (4 inputs, 2 hidden ReLU
// neurons, 3 output neurons, argmax) with exact coefficients.
//
// A reference model here gives the output-neuron values and the class (first
// maximum). The test fails if some class is never predicted.
module tb_mlp_c;
  localparam int NI = 4;
  localparam int NH = 2;
  localparam int NO = 3;
  localparam int W1 [NH][NI] = '{'{60, -35, 25, -20}, '{-30, 55, -10, 40}};
  localparam int B1 [NH]     = '{50, 20};
  localparam int W2 [NO][NH] = '{'{90, -60}, '{-70, 85}, '{20, 25}};
  localparam int B2 [NO]     = '{0, 0, 1500};

  function automatic logic [NH*NI*8-1:0] pack1();
    logic [NH*NI*8-1:0] v;
    for (int j = 0; j < NH; j++)
      for (int i = 0; i < NI; i++) v[(j*NI+i)*8 +: 8] = 8'(W1[j][i]);
    return v;
  endfunction
  function automatic logic [NO*NH*8-1:0] pack2();
    logic [NO*NH*8-1:0] v;
    for (int o = 0; o < NO; o++)
      for (int j = 0; j < NH; j++) v[(o*NH+j)*8 +: 8] = 8'(W2[o][j]);
    return v;
  endfunction

  int checks   = 0;
  int failures = 0;
  int seen [NO];

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]         x [NI];
  logic signed [19:0] y [NO];
  logic [1:0]         cls;

  mlp_c #(
    .N_IN(NI), .N_HID(NH), .N_OUT(NO), .H_W(8), .H_SHIFT(4),
    .COEF1(pack1()), .BIAS1(B1), .COEF2(pack2()), .BIAS2(B2), .APPROX(1'b0)
  ) u_dut (.x(x), .y(y), .cls(cls));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s;
    int h [NH];
    int o [NO];
    int bi;
    for (int k = 0; k < NO; k++) seen[k] = 0;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < NI; i++) x[i] = 4'($urandom);
      for (int j = 0; j < NH; j++) begin
        s = B1[j];
        for (int i = 0; i < NI; i++) s += int'(x[i]) * W1[j][i];
        h[j] = (s < 0) ? 0 : (((s >>> 4) > 255) ? 255 : (s >>> 4));
      end
      bi = 0;
      for (int k = 0; k < NO; k++) begin
        o[k] = B2[k];
        for (int j = 0; j < NH; j++) o[k] += h[j] * W2[k][j];
        if (o[k] > o[bi]) bi = k;
      end
      seen[bi]++;
      #1;
      for (int k = 0; k < NO; k++) begin
        checks++;
        if (int'(y[k]) != o[k]) begin
          failures++;
          $display("FAIL x=%p y[%0d]=%0d expected %0d", x, k, y[k], o[k]);
        end
      end
      checks++;
      if (int'(cls) != bi) begin
        failures++;
        $display("FAIL x=%p class %0d expected %0d", x, cls, bi);
      end
      @(posedge clk);
    end
    $display("classes predicted: %p", seen);
    for (int k = 0; k < NO; k++)
      if (seen[k] == 0) begin
        failures++;
        $display("FAIL class %0d never predicted", k);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
