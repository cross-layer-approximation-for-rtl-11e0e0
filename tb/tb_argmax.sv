// tb_argmax: random and directed check of argmax over K = 5 signed values.
//
// Values are drawn from a narrow range so that ties are frequent; the expected
// index (first maximum) is computed here. Directed cases put the maximum at
// each position and test all-equal and the most negative values.
module tb_argmax;
  localparam int K   = 5;
  localparam int V_W = 8;

  int checks   = 0;
  int failures = 0;
  int ties     = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [V_W-1:0] val [K];
  logic [2:0]            idx;

  argmax #(.K(K), .V_W(V_W)) u_dut (.val(val), .idx(idx));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int best;
    int bi;
    int nbest;
    best  = int'(val[0]);
    bi    = 0;
    nbest = 1;
    for (int k = 1; k < K; k++) begin
      if (int'(val[k]) > best) begin
        best  = int'(val[k]);
        bi    = k;
        nbest = 1;
      end else if (int'(val[k]) == best) nbest++;
    end
    if (nbest > 1) ties++;
    #1;
    checks++;
    if (int'(idx) != bi) begin
      failures++;
      $display("FAIL val=%p idx=%0d expected %0d", val, idx, bi);
    end
    @(posedge clk);
  endtask

  initial begin
    for (int p = 0; p < K; p++) begin
      for (int k = 0; k < K; k++) val[k] = -8'sd128;
      val[p] = 8'sd127;
      check();
      for (int k = 0; k < K; k++) val[k] = 8'sd3;
      val[p] = -8'sd2;
      check();
    end
    for (int k = 0; k < K; k++) val[k] = -8'sd5;
    check();
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < K; k++) val[k] = V_W'(int'($urandom_range(0, 8)) - 4);
      check();
    end
    for (int n = 0; n < 2000; n++) begin
      for (int k = 0; k < K; k++) val[k] = V_W'($urandom);
      check();
    end
    if (ties == 0) begin
      failures++;
      $display("FAIL no tie was exercised");
    end
    $display("ties exercised: %0d", ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
