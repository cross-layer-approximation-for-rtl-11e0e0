// tb_bespoke_mult: exhaustive check of the bespoke constant multiplier.
//
// Eight instances with 4-bit inputs cover the coefficient corners (-128, -1, 0,
// 1, powers of two, 127 and two irregular values); one instance has the 8-bit
// input of the second MLP layer. Every input value is applied and p is compared
// with the integer product worked out here. Ends with the TB_RESULT line; a
// watchdog ends the run as a failure if it hangs.
module tb_bespoke_mult;
  localparam int NW = 8;
  localparam int WV [NW] = '{-128, -1, 0, 1, 64, 127, 45, -77};

  int checks   = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic [3:0]         x4;
  logic signed [11:0] p4 [NW];
  logic [7:0]         x8;
  logic signed [15:0] p8;

  for (genvar k = 0; k < NW; k++) begin : g_dut
    bespoke_mult #(.X_W(4), .W_W(8), .W(8'(WV[k]))) u_dut (.x(x4), .p(p4[k]));
  end

  bespoke_mult #(.X_W(8), .W_W(8), .W(-8'sd93)) u_dut8 (.x(x8), .p(p8));

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int x = 0; x < 16; x++) begin
      x4 = 4'(x);
      @(posedge clk);
      for (int k = 0; k < NW; k++) begin
        checks++;
        if (int'(p4[k]) != x * WV[k]) begin
          failures++;
          $display("FAIL x=%0d w=%0d p=%0d expected %0d", x, WV[k], p4[k], x * WV[k]);
        end
      end
    end
    for (int x = 0; x < 256; x++) begin
      x8 = 8'(x);
      @(posedge clk);
      checks++;
      if (int'(p8) != x * -93) begin
        failures++;
        $display("FAIL x=%0d w=-93 p=%0d expected %0d", x, p8, x * -93);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
