// tb_svm_c: checks the bespoke linear SVM classifier with 4 inputs and 4
// classes (6 pairwise classifiers), exact coefficients.
//
// The reference model computes each decision value, the 1-vs-1 votes
// (positive decision votes for the first class of the pair) and the winning
// class (lowest class on a tie). The test fails if some class is never
// predicted.
module tb_svm_c;
  localparam int NI = 4;
  localparam int C  = 4;
  localparam int P  = 6;
  localparam int W [P][NI] = '{'{40, -30, 10, -5}, '{35, 5, -40, 0}, '{20, 10, 10, -45},
                              '{-5, 40, -35, 2}, '{-10, 30, 5, -40}, '{3, -8, 42, -38}};
  localparam int B [P] = '{-20, 10, 30, 0, 25, -15};

  function automatic logic [P*NI*8-1:0] pack();
    logic [P*NI*8-1:0] v;
    for (int p = 0; p < P; p++)
      for (int i = 0; i < NI; i++) v[(p*NI+i)*8 +: 8] = 8'(W[p][i]);
    return v;
  endfunction

  int checks   = 0;
  int failures = 0;
  int seen [C];

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]         x [NI];
  logic signed [16:0] d [P];
  logic [1:0]         cls;

  svm_c #(.N_IN(NI), .C(C), .COEF(pack()), .BIAS(B), .APPROX(1'b0)) u_dut (.x(x), .d(d), .cls(cls));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dv [P];
    int votes [C];
    int p;
    int bi;
    for (int k = 0; k < C; k++) seen[k] = 0;
    for (int n = 0; n < 3000; n++) begin
      for (int i = 0; i < NI; i++) x[i] = 4'($urandom);
      for (int q = 0; q < P; q++) begin
        dv[q] = B[q];
        for (int i = 0; i < NI; i++) dv[q] += int'(x[i]) * W[q][i];
      end
      for (int k = 0; k < C; k++) votes[k] = 0;
      p = 0;
      for (int i = 0; i < C; i++)
        for (int j = i + 1; j < C; j++) begin
          if (dv[p] > 0) votes[i]++;
          else           votes[j]++;
          p++;
        end
      bi = 0;
      for (int k = 1; k < C; k++) if (votes[k] > votes[bi]) bi = k;
      seen[bi]++;
      #1;
      for (int q = 0; q < P; q++) begin
        checks++;
        if (int'(d[q]) != dv[q]) begin
          failures++;
          $display("FAIL x=%p d[%0d]=%0d expected %0d", x, q, d[q], dv[q]);
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
    for (int k = 0; k < C; k++)
      if (seen[k] == 0) begin
        failures++;
        $display("FAIL class %0d never predicted", k);
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
