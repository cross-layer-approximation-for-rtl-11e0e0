// tb_ovo_vote: random check of the 1-vs-1 voting stage for C = 4 classes
// (6 pairwise decisions) and C = 3.
//
// The expected class is worked out here from the pair order (0,1),(0,2),...,
// the rule "decision > 0 votes for the first class of the pair" and the
// lowest-class tie rule. Decision values near zero are frequent so that the
// d = 0 boundary and vote ties are covered.
module tb_ovo_vote;
  int checks   = 0;
  int failures = 0;
  int ties     = 0;
  int zeros    = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [9:0] d4 [6];
  logic [1:0]        cls4;
  logic signed [9:0] d3 [3];
  logic [1:0]        cls3;

  ovo_vote #(.C(4), .D_W(10)) u_dut4 (.d(d4), .cls(cls4));
  ovo_vote #(.C(3), .D_W(10)) u_dut3 (.d(d3), .cls(cls3));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_class(input int c, input int dv [6]);
    int votes [4];
    int p;
    int best;
    int bi;
    int nb;
    for (int k = 0; k < 4; k++) votes[k] = 0;
    p = 0;
    for (int i = 0; i < c; i++)
      for (int j = i + 1; j < c; j++) begin
        if (dv[p] > 0) votes[i]++;
        else           votes[j]++;
        p++;
      end
    best = votes[0];
    bi   = 0;
    nb   = 1;
    for (int k = 1; k < c; k++) begin
      if (votes[k] > best) begin
        best = votes[k];
        bi   = k;
        nb   = 1;
      end else if (votes[k] == best) nb++;
    end
    if (nb > 1) ties++;
    return bi;
  endfunction

  initial begin
    int dv [6];
    int e;
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < 6; p++) begin
        dv[p] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(0, 2)) - 1
                                            : int'($urandom_range(0, 1000)) - 500;
        if (dv[p] == 0) zeros++;
        d4[p] = 10'(dv[p]);
        if (p < 3) d3[p] = 10'(dv[p]);
      end
      #1;
      e = ref_class(4, dv);
      checks++;
      if (int'(cls4) != e) begin
        failures++;
        $display("FAIL C=4 d=%p cls=%0d expected %0d", dv, cls4, e);
      end
      e = ref_class(3, dv);
      checks++;
      if (int'(cls3) != e) begin
        failures++;
        $display("FAIL C=3 d=%p cls=%0d expected %0d", dv, cls3, e);
      end
      @(posedge clk);
    end
    if (ties == 0 || zeros == 0) begin
      failures++;
      $display("FAIL ties=%0d zero decisions=%0d: a case was not exercised", ties, zeros);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
